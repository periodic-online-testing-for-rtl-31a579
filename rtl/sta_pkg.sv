// sta_pkg: shared constants and types of the sparse systolic tensor array with
// periodic online testing.
//
// The array is an 8x8 grid of tensor processing elements (TPEs). Each TPE sees a
// block of M=4 consecutive activations and holds N=2 non-zero weights (2:4
// structured sparsity, or 1:4 with one weight). Inputs and weights are 16-bit
// integers, column sums are 32 bits. These numbers are the defaults of the module
// parameters; the types below (slot tag, fault class, phase) are this design's own.
package sta_pkg;

  localparam int unsigned DEF_ROWS      = 8;
  localparam int unsigned DEF_COLS      = 8;
  localparam int unsigned DEF_M         = 4;
  localparam int unsigned DEF_N         = 2;
  localparam int unsigned DEF_DW        = 16;
  localparam int unsigned DEF_AW        = 32;
  localparam int unsigned DEF_ACC_DEPTH = 16;

  // Width of the accumulator-row address carried in a slot tag.
  localparam int unsigned ADDR_W = 8;

  // Number of tests in one session and the test numbers (0-based).
  localparam int unsigned NUM_TESTS = 4;
  typedef logic [1:0] test_id_t;
  localparam test_id_t TEST_SUM      = 2'd0; // [1,1,1,1],     sum input 0
  localparam test_id_t TEST_NEG_SUM  = 2'd1; // [-1,-1,-1,-1], sum input -1
  localparam test_id_t TEST_INDEX    = 2'd2; // [1,2,3,4],     sum input 0
  localparam test_id_t TEST_ACT      = 2'd3; // [1,2,3,4],     sum input 0, test_4 high

  // What the value leaving the south edge of a column in a given cycle is.
  typedef enum logic [1:0] {
    SLOT_IDLE = 2'd0,
    SLOT_TEST = 2'd1,
    SLOT_COMP = 2'd2
  } slot_kind_e;

  typedef struct packed {
    slot_kind_e         kind;
    test_id_t           test_id;  // valid for SLOT_TEST
    logic               first;    // SLOT_COMP: first K-tile, start from zero
    logic [ADDR_W-1:0]  addr;     // SLOT_COMP: accumulator row
  } slot_t;

  // Register class a failing column points to.
  typedef enum logic [2:0] {
    LOC_NONE          = 3'd0,
    LOC_WEIGHT_REG    = 3'd1,
    LOC_OUTPUT_REG    = 3'd2,
    LOC_COMPARE_ADDER = 3'd3,
    LOC_INDEX_REG     = 3'd4,
    LOC_ACT_REG       = 3'd5,
    LOC_UNKNOWN       = 3'd6
  } loc_e;

  // Phase of the test/compute sequence.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_TEST  = 2'd1,
    ST_RUN   = 2'd2,
    ST_DRAIN = 2'd3
  } state_e;

endpackage
