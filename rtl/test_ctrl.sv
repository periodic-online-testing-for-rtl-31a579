// test_ctrl: sequencer of the periodic online test and the session report.
//
// Phases (state_o):
//   ST_IDLE  weights of a new tile may be written (w_ready_o). test_start_i, given
//            once the tile is loaded, starts a test session.
//   ST_TEST  four consecutive cycles, one test slot each (test_issue_o with
//            test_id_o = 0,1,2,3 for Tests 1..4). clear_o pulses in the cycle
//            test_start_i is accepted so the column checkers start afresh.
//   ST_RUN   application activations are accepted (act_ready_o). The test
//            responses are still travelling through the array; computation does
//            not wait for them, so a session costs exactly four cycles per tile.
//            tile_end_i (the last activation of the tile) ends the phase.
//   ST_DRAIN ROWS+COLS+2 cycles so nothing is in flight when new weights arrive.
// Report: once every column checker is done, session_done_o pulses for one cycle
// and fault_o, act_err_valid_o and act_err_col_o hold the result until the next
// session. act_err_col_o is the leftmost column that failed Test 4; a faulty
// activation register lies in one of the M columns to its left.
// Running a session on every tile and the four-cycle cost follow the paper; the
// phase machine and the drain time are this design's own.
module test_ctrl #(
  parameter int unsigned ROWS = sta_pkg::DEF_ROWS,
  parameter int unsigned COLS = sta_pkg::DEF_COLS,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               test_start_i,
  input  logic               tile_end_i,
  input  logic [COLS-1:0]    col_done_i,
  input  logic [COLS-1:0]    col_fail_i,
  input  logic [COLS-1:0]    col_fail4_i,
  output sta_pkg::state_e    state_o,
  output logic               clear_o,
  output logic               test_issue_o,
  output sta_pkg::test_id_t  test_id_o,
  output logic               w_ready_o,
  output logic               act_ready_o,
  output logic               session_done_o,
  output logic               fault_o,
  output logic               act_err_valid_o,
  output logic [CW-1:0]      act_err_col_o
);
  import sta_pkg::*;

  localparam int unsigned DRAIN_CYC = ROWS + COLS + 2;
  localparam int unsigned DCW       = $clog2(DRAIN_CYC + 1);

  state_e          state_q;
  logic [1:0]      tcnt_q;
  logic [DCW-1:0]  dcnt_q;
  logic            collecting_q;
  logic            first_fail_found;
  logic [CW-1:0]   first_fail_col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      tcnt_q  <= '0;
      dcnt_q  <= '0;
    end else begin
      unique case (state_q)
        ST_IDLE: if (test_start_i) begin
          state_q <= ST_TEST;
          tcnt_q  <= '0;
        end
        ST_TEST: begin
          tcnt_q <= tcnt_q + 2'd1;
          if (tcnt_q == 2'd3) state_q <= ST_RUN;
        end
        ST_RUN: if (tile_end_i) begin
          state_q <= ST_DRAIN;
          dcnt_q  <= '0;
        end
        ST_DRAIN: begin
          dcnt_q <= dcnt_q + 1'b1;
          if (dcnt_q == DCW'(DRAIN_CYC - 1)) state_q <= ST_IDLE;
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  assign state_o      = state_q;
  assign clear_o      = (state_q == ST_IDLE) && test_start_i;
  assign test_issue_o = (state_q == ST_TEST);
  assign test_id_o    = test_id_t'(tcnt_q);
  assign w_ready_o    = (state_q == ST_IDLE);
  assign act_ready_o  = (state_q == ST_RUN);

  // Leftmost column failing Test 4.
  always_comb begin
    first_fail_found = 1'b0;
    first_fail_col   = '0;
    for (int unsigned c = 0; c < COLS; c++) begin
      if (col_fail4_i[c] && !first_fail_found) begin
        first_fail_found = 1'b1;
        first_fail_col   = CW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      collecting_q    <= 1'b0;
      session_done_o  <= 1'b0;
      fault_o         <= 1'b0;
      act_err_valid_o <= 1'b0;
      act_err_col_o   <= '0;
    end else begin
      session_done_o <= 1'b0;
      if (clear_o) begin
        collecting_q    <= 1'b1;
        fault_o         <= 1'b0;
        act_err_valid_o <= 1'b0;
        act_err_col_o   <= '0;
      end else if (collecting_q && (&col_done_i)) begin
        collecting_q    <= 1'b0;
        session_done_o  <= 1'b1;
        fault_o         <= |col_fail_i;
        act_err_valid_o <= first_fail_found;
        act_err_col_o   <= first_fail_col;
      end
    end
  end

endmodule
