// tb_test_ctrl: phase sequence and session report of the controller (8x8).
// Checks: weights accepted only in IDLE; clear in the cycle test_start is taken;
// exactly four test slots, numbered 0..3, in consecutive cycles; activations
// accepted from the fifth cycle on (four cycles of overhead per tile); a drain of
// ROWS+COLS+2 cycles after tile_end; one session_done pulse once all columns are
// done, with fault and the leftmost Test 4 column taken from the column flags.
module tb_test_ctrl;
  import sta_pkg::*;
  localparam int unsigned ROWS = 8, COLS = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             test_start_i, tile_end_i;
  logic [COLS-1:0]  col_done_i, col_fail_i, col_fail4_i;
  state_e           state_o;
  logic             clear_o, test_issue_o, w_ready_o, act_ready_o, session_done_o, fault_o, act_err_valid_o;
  test_id_t         test_id_o;
  logic [2:0]       act_err_col_o;

  test_ctrl #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (state %s)", what, state_o.name());
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_tile(input logic [COLS-1:0] fail, fail4, input int run_len);
    int dones = 0;
    int first4 = -1;
    for (int c = COLS - 1; c >= 0; c--) if (fail4[c]) first4 = c;
    @(negedge clk);
    check(state_o === ST_IDLE && w_ready_o && !act_ready_o, "idle, weights accepted");
    test_start_i = 1;
    #1 check(clear_o, "clear with test_start");
    @(negedge clk);
    test_start_i = 0;
    col_done_i = '0;
    for (int t = 0; t < 4; t++) begin
      check(test_issue_o && test_id_o === test_id_t'(t) && !w_ready_o && !act_ready_o, $sformatf("test slot %0d", t));
      @(negedge clk);
    end
    check(!test_issue_o && act_ready_o, "activations accepted after four test cycles");
    // columns report, some cycles later
    col_fail_i = fail; col_fail4_i = fail4;
    for (int k = 1; k < run_len; k++) begin
      if (k === 3) col_done_i = '1;
      @(negedge clk);
      if (session_done_o) dones++;
      check(act_ready_o, "stays in RUN");
    end
    tile_end_i = 1;
    @(negedge clk);
    tile_end_i = 0;
    for (int d = 0; d < ROWS + COLS + 2; d++) begin
      check(state_o === ST_DRAIN && !act_ready_o && !w_ready_o, "drain");
      if (session_done_o) dones++;
      @(negedge clk);
    end
    check(state_o === ST_IDLE, "back to idle after drain");
    check(dones === 1, "exactly one session_done pulse");
    check(fault_o === (|fail), "fault flag");
    check(act_err_valid_o === (first4 >= 0), "test 4 flag");
    if (first4 >= 0) check(act_err_col_o === 3'(first4), "leftmost test 4 column");
  endtask

  initial begin
    test_start_i = 0; tile_end_i = 0; col_done_i = '0; col_fail_i = '0; col_fail4_i = '0;
    #12 rst_n = 1;
    one_tile(8'h00, 8'h00, 6);
    one_tile(8'h24, 8'h24, 10);
    one_tile(8'h90, 8'h00, 5);
    for (int i = 0; i < 10; i++) begin
      logic [7:0] f4 = 8'($urandom);
      one_tile(f4 | 8'($urandom), f4, 5 + i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
