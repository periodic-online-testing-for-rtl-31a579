// sta_top: sparse systolic tensor array with periodic online testing.
//
// The design multiplies a dense activation matrix A by a structured-sparse weight
// matrix W (2:4, or 1:4 with mode_1of4) on a ROWS x COLS weight-stationary array
// of tensor PEs, and checks the array for permanent faults every time a new
// weight tile is loaded, using the weights already in the array and only four
// test vectors.
//
// Operation of one tile:
//  1. ST_IDLE: the host writes the tile row by row (w_we, w_row, w_data, w_idx;
//     one-hot indexes), then pulses test_start.
//  2. ST_TEST: four cycles, one test vector each (Tests 1..4) on every row, with
//     the matching value on the top-row sum inputs. Test 4 also raises test_4 in
//     every TPE it passes. No handshake with the host.
//  3. ST_RUN: act_ready is high; each cycle with act_valid feeds one A row (ROWS
//     blocks of M elements) whose COLS outputs are added into accumulator row
//     act_addr (or stored there if act_first). tile_end marks the last row.
//  4. ST_DRAIN, then back to ST_IDLE.
// The test responses reach the south edge while computation already runs. There
// the accumulator adder of each column adds the golden value GV (gv_i[c][k], the
// host's precomputed reference for test k of column c) instead of the
// accumulator feedback. A fault-free column gives 0, -1, 0, 0. The column
// checkers classify the failing register type. The session report
// (session_done pulse; fault_detected, col_fail, col_loc, act_err_*) follows
// ROWS+COLS+5 cycles after the edge that takes test_start.
//
// Golden values for a fault-free array, with w the weights of column c and idx the
// 1-based index of each weight in its block:
//   GV[c][0] = -sum(w)        GV[c][1] = sum(w)
//   GV[c][2] = -sum(idx*w)    GV[c][3] = -((c mod M)+1)*sum(w)
// (in 1:4 mode only the first weight of each TPE counts).
//
// Timing: an A row accepted in cycle t reaches row r at t+r (input skew), column c
// of the south edge at t+ROWS+c, and is in the accumulator at t+ROWS+c+1.
// The test method, the TPE structure, the test_4 masking gates and the GV
// multiplexer follow the paper. The skew registers, the slot tag that travels
// with the data to the south edge, the host interfaces and the report format are
// this design's own.
module sta_top #(
  parameter int unsigned ROWS      = sta_pkg::DEF_ROWS,
  parameter int unsigned COLS      = sta_pkg::DEF_COLS,
  parameter int unsigned M         = sta_pkg::DEF_M,
  parameter int unsigned N         = sta_pkg::DEF_N,
  parameter int unsigned DW        = sta_pkg::DEF_DW,
  parameter int unsigned AW        = sta_pkg::DEF_AW,
  parameter int unsigned ACC_DEPTH = sta_pkg::DEF_ACC_DEPTH,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned DAW = (ACC_DEPTH > 1) ? $clog2(ACC_DEPTH) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                mode_1of4,
  // weight loading
  input  logic                                w_we,
  input  logic [RW-1:0]                       w_row,
  input  logic [COLS-1:0][N-1:0][DW-1:0]      w_data,
  input  logic [COLS-1:0][N-1:0][M-1:0]       w_idx,
  output logic                                w_ready,
  // test session
  input  logic                                test_start,
  input  logic [COLS-1:0][3:0][AW-1:0]        gv_i,
  // activation stream
  input  logic                                act_valid,
  input  logic [ROWS-1:0][M-1:0][DW-1:0]      act_i,
  input  logic [sta_pkg::ADDR_W-1:0]          act_addr,
  input  logic                                act_first,
  output logic                                act_ready,
  input  logic                                tile_end,
  // results
  input  logic [DAW-1:0]                      acc_rd_addr,
  output logic [COLS-1:0][AW-1:0]             acc_rd_data,
  // test report
  output sta_pkg::state_e                     state_o,
  output logic                                session_done,
  output logic                                fault_detected,
  output logic [COLS-1:0][3:0]                col_fail,
  output sta_pkg::loc_e [COLS-1:0]            col_loc,
  output logic                                act_err_valid,
  output logic [CW-1:0]                       act_err_col
);
  import sta_pkg::*;

  // ---------------- control ----------------
  logic       clear, test_issue;
  test_id_t   test_id;
  logic [COLS-1:0] col_done, col_any_fail, col_fail4;

  test_ctrl #(.ROWS(ROWS), .COLS(COLS)) u_ctrl (
    .clk             (clk),
    .rst_n           (rst_n),
    .test_start_i    (test_start),
    .tile_end_i      (tile_end),
    .col_done_i      (col_done),
    .col_fail_i      (col_any_fail),
    .col_fail4_i     (col_fail4),
    .state_o         (state_o),
    .clear_o         (clear),
    .test_issue_o    (test_issue),
    .test_id_o       (test_id),
    .w_ready_o       (w_ready),
    .act_ready_o     (act_ready),
    .session_done_o  (session_done),
    .fault_o         (fault_detected),
    .act_err_valid_o (act_err_valid),
    .act_err_col_o   (act_err_col)
  );

  // ---------------- edge stimulus (unskewed) ----------------
  logic [M-1:0][DW-1:0] tv_vec;
  logic [AW-1:0]        tv_sum;
  logic                 tv_t4;
  logic                 comp;

  test_vector_gen #(.M(M), .DW(DW), .AW(AW)) u_tvg (
    .test_id (test_id),
    .vec_o   (tv_vec),
    .sum_o   (tv_sum),
    .test4_o (tv_t4)
  );

  assign comp = act_valid && act_ready;

  logic [ROWS-1:0][M-1:0][DW-1:0] west_act;
  logic [ROWS-1:0]                west_t4;
  logic [AW-1:0]                  north_sum;
  slot_t                          slot0;

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (test_issue) begin
        west_act[r] = tv_vec;
        west_t4[r]   = tv_t4;
      end else if (comp) begin
        west_act[r] = act_i[r];
        west_t4[r]   = 1'b0;
      end else begin
        west_act[r] = '0;
        west_t4[r]   = 1'b0;
      end
    end
    north_sum     = test_issue ? tv_sum : '0;
    slot0.kind    = test_issue ? SLOT_TEST : (comp ? SLOT_COMP : SLOT_IDLE);
    slot0.test_id = test_id;
    slot0.first   = act_first;
    slot0.addr    = act_addr;
  end

  // ---------------- skew ----------------
  logic [ROWS-1:0][M-1:0][DW-1:0] arr_act;
  logic [ROWS-1:0]                arr_t4;
  logic [COLS-1:0][AW-1:0]        arr_sum_in, arr_sum_out;
  slot_t [COLS-1:0]               col_slot;

  for (genvar r = 0; r < ROWS; r++) begin : g_wskew
    delay_line #(.W(M*DW+1), .DEPTH(r)) u_dl (
      .clk (clk), .rst_n (rst_n),
      .d_i ({west_t4[r], west_act[r]}),
      .q_o ({arr_t4[r], arr_act[r]})
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_nskew
    delay_line #(.W(AW), .DEPTH(c)) u_dl_sum (
      .clk (clk), .rst_n (rst_n), .d_i (north_sum), .q_o (arr_sum_in[c])
    );
    delay_line #(.W($bits(slot_t)), .DEPTH(ROWS + c)) u_dl_slot (
      .clk (clk), .rst_n (rst_n), .d_i (slot0), .q_o (col_slot[c])
    );
  end

  // ---------------- array ----------------
  tensor_array #(.ROWS(ROWS), .COLS(COLS), .M(M), .N(N), .DW(DW), .AW(AW)) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .mode_1of4 (mode_1of4),
    .w_we      (w_we && w_ready),
    .w_row     (w_row),
    .w_data    (w_data),
    .w_idx     (w_idx),
    .act_i     (arr_act),
    .test4_i   (arr_t4),
    .psum_i    (arr_sum_in),
    .psum_o    (arr_sum_out)
  );

  // ---------------- south edge ----------------
  for (genvar c = 0; c < COLS; c++) begin : g_south
    logic          res_valid;
    test_id_t      res_test;
    logic [AW-1:0] raw, res;

    south_acc #(.AW(AW), .ACC_DEPTH(ACC_DEPTH)) u_acc (
      .clk         (clk),
      .rst_n       (rst_n),
      .slot_i      (col_slot[c]),
      .col_i       (arr_sum_out[c]),
      .gv_i        (gv_i[c]),
      .res_valid_o (res_valid),
      .res_test_o  (res_test),
      .raw_o       (raw),
      .res_o       (res),
      .rd_addr     (acc_rd_addr),
      .rd_data     (acc_rd_data[c])
    );

    fault_locator #(.AW(AW)) u_loc (
      .clk         (clk),
      .rst_n       (rst_n),
      .clear_i     (clear),
      .res_valid_i (res_valid),
      .res_test_i  (res_test),
      .raw_i       (raw),
      .res_i       (res),
      .done_o      (col_done[c]),
      .fail_o      (col_fail[c]),
      .loc_o       (col_loc[c])
    );

    assign col_any_fail[c] = |col_fail[c];
    assign col_fail4[c]    = col_fail[c][TEST_ACT];
  end

  // Weights may only change while the array is idle.
  a_load_when_idle: assert property (@(posedge clk) disable iff (!rst_n) w_we |-> w_ready)
    else $error("sta_top: weight write outside ST_IDLE is ignored");

endmodule
