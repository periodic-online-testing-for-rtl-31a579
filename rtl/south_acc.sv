// south_acc: accumulator at the south edge of one array column, with the
// golden-value multiplexer that turns it into the test comparator.
//
// slot_i says what the column output col_i of this cycle is (it is the slot tag
// issued with the data, delayed by the array latency of this column):
//  * SLOT_COMP: an application partial sum for accumulator row slot_i.addr. The
//    adder computes col_i + acc[addr] (or col_i + 0 when slot_i.first marks the
//    first K-tile) and writes it back. Partial sums of consecutive weight tiles
//    are thus summed here.
//  * SLOT_TEST: the response to test slot_i.test_id. The multiplexer replaces the
//    accumulator feedback by the golden value gv_i[test_id], so the same adder
//    computes col_i + GV: zero (Tests 1, 3, 4) or all ones (Test 2) when fault free.
//    The raw column output and the adder output are registered on raw_o/res_o
//    with res_valid_o one cycle later; the accumulator rows are not written, so a
//    test session does not disturb partial sums already held.
//  * SLOT_IDLE: nothing happens.
// The reuse of the accumulator adder with a GV multiplexer is the paper's; the
// buffer depth, the first flag and the separate result registers are this
// design's choices. rd_data is a combinational read of row rd_addr.
module south_acc #(
  parameter int unsigned AW        = sta_pkg::DEF_AW,
  parameter int unsigned ACC_DEPTH = sta_pkg::DEF_ACC_DEPTH,
  localparam int unsigned DAW      = (ACC_DEPTH > 1) ? $clog2(ACC_DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  sta_pkg::slot_t       slot_i,
  input  logic [AW-1:0]        col_i,
  input  logic [3:0][AW-1:0]   gv_i,
  output logic                 res_valid_o,
  output sta_pkg::test_id_t    res_test_o,
  output logic [AW-1:0]        raw_o,
  output logic [AW-1:0]        res_o,
  input  logic [DAW-1:0]       rd_addr,
  output logic [AW-1:0]        rd_data
);
  import sta_pkg::*;

  initial assert (ACC_DEPTH <= 2**ADDR_W) else $error("south_acc: ACC_DEPTH too large");

  logic [AW-1:0]  acc [ACC_DEPTH];
  logic [DAW-1:0] waddr;
  logic [AW-1:0]  operand;  // multiplexer output: GV or accumulator feedback
  logic [AW-1:0]  sum;      // accumulator / comparison adder

  assign waddr = DAW'(slot_i.addr);

  always_comb begin
    if (slot_i.kind == SLOT_TEST) operand = gv_i[slot_i.test_id];
    else if (slot_i.first)        operand = '0;
    else                          operand = acc[waddr];
  end

  assign sum = col_i + operand;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ACC_DEPTH; i++) acc[i] <= '0;
    end else if (slot_i.kind == SLOT_COMP) begin
      acc[waddr] <= sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid_o <= 1'b0;
      res_test_o  <= TEST_SUM;
      raw_o       <= '0;
      res_o       <= '0;
    end else begin
      res_valid_o <= (slot_i.kind == SLOT_TEST);
      if (slot_i.kind == SLOT_TEST) begin
        res_test_o <= slot_i.test_id;
        raw_o      <= col_i;
        res_o      <= sum;
      end
    end
  end

  assign rd_data = acc[rd_addr];

endmodule
