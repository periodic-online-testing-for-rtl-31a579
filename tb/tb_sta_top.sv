// tb_sta_top: end-to-end run of the full 8x8 array with its default parameters.
//
// Phase 1, fault free: three K-tiles of a 12-row output block are accumulated
// (2:4, 1:4, 2:4 weights). Each tile is loaded, tested, and used; the session
// must report no fault, take exactly four cycles before activations are
// accepted, and report ROWS+COLS+5 cycles after test_start. The accumulated
// result is compared with a product computed here.
// Phase 2, fault injection: a permanent fault is imposed with force on one
// register of the design, a session is run, and the column and register class
// reported must match: weight register, output register, south comparison adder,
// weight-index register (Test 3) and activation register (Test 4 errors every M
// columns starting at the first column to the right of the fault that selects the
// faulty element).
// Each mechanism (test session, test_4, 2:4 and 1:4 modes, accumulation across
// tiles, each fault class) is counted; one that never happened is a failure.
module tb_sta_top;
  import sta_pkg::*;
  localparam int ROWS = 8, COLS = 8, M = 4, N = 2, DW = 16, AW = 32, ACC_DEPTH = 16;
  localparam int NA = 12;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                                mode_1of4, w_we, w_ready, test_start;
  logic [2:0]                          w_row;
  logic [COLS-1:0][N-1:0][DW-1:0]      w_data;
  logic [COLS-1:0][N-1:0][M-1:0]       w_idx;
  logic [COLS-1:0][3:0][AW-1:0]        gv_i;
  logic                                act_valid, act_first, act_ready, tile_end;
  logic [ROWS-1:0][M-1:0][DW-1:0]      act_i;
  logic [ADDR_W-1:0]                   act_addr;
  logic [3:0]                          acc_rd_addr;
  logic [COLS-1:0][AW-1:0]             acc_rd_data;
  state_e                              state_o;
  logic                                session_done, fault_detected, act_err_valid;
  logic [COLS-1:0][3:0]                col_fail;
  loc_e [COLS-1:0]                     col_loc;
  logic [2:0]                          act_err_col;

  sta_top dut (.*);

  // ---------------- reference state ----------------
  int          W  [ROWS][COLS][N];
  int unsigned IX [ROWS][COLS][N];
  bit          cur_m14;
  int unsigned ref_acc [NA][COLS];

  // mechanism counters
  int n_sessions = 0, n_t4_cycles = 0, n_tiles_24 = 0, n_tiles_14 = 0, n_accumulate = 0;
  int n_loc [loc_e];

  always @(posedge clk) if (|dut.arr_t4) n_t4_cycles++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random 2:4 tile (distinct indexes, non-zero weights)
  task automatic new_tile();
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int unsigned i0 = $urandom_range(0, M - 2);
        IX[r][c][0] = i0;
        IX[r][c][1] = $urandom_range(i0 + 1, M - 1);
        for (int n = 0; n < N; n++) begin
          W[r][c][n] = $urandom_range(1, 2000) - 1000;
          if (W[r][c][n] === 0) W[r][c][n] = 7;
        end
      end
  endtask

  // golden values for the tile in the array
  task automatic set_gv();
    for (int c = 0; c < COLS; c++) begin
      int s = 0, sx = 0;
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < N; n++) begin
          if (n > 0 && cur_m14) continue;
          s  += W[r][c][n];
          sx += W[r][c][n] * int'(IX[r][c][n] + 1);
        end
      gv_i[c][0] = AW'(-s);
      gv_i[c][1] = AW'(s);
      gv_i[c][2] = AW'(-sx);
      gv_i[c][3] = AW'(-(c % M + 1) * s);
    end
  endtask

  task automatic load_tile(input bit m14);
    cur_m14 = m14;
    while (!w_ready) @(negedge clk);
    mode_1of4 = m14;
    for (int r = 0; r < ROWS; r++) begin
      w_we  = 1;
      w_row = 3'(r);
      for (int c = 0; c < COLS; c++)
        for (int n = 0; n < N; n++) begin
          w_data[c][n] = DW'(W[r][c][n]);
          w_idx[c][n]  = M'(1 << IX[r][c][n]);
        end
      @(negedge clk);
    end
    w_we = 0;
    set_gv();
    if (m14) n_tiles_14++; else n_tiles_24++;
  endtask

  // Runs a test session and then streams nrows A rows (none for nrows=0).
  // Returns when the session report is out and the array is idle again.
  task automatic session_and_run(input int nrows, input bit first);
    int t_start, t_ready = -1, t_done = -1, cyc = 0, sent = 0;
    int A [ROWS][M];
    test_start = 1;
    @(negedge clk);
    test_start = 0;
    t_start = 0;
    cyc = 1;
    while (state_o !== ST_IDLE || t_done < 0) begin
      if (act_ready && t_ready < 0) t_ready = cyc;
      act_valid = 0; tile_end = 0;
      if (act_ready) begin
        if (sent < nrows) begin
          for (int r = 0; r < ROWS; r++) for (int k = 0; k < M; k++) begin
            A[r][k] = $urandom_range(0, 4000) - 2000;
            act_i[r][k] = DW'(A[r][k]);
          end
          act_valid = 1;
          act_first = first;
          act_addr  = ADDR_W'(sent);
          for (int c = 0; c < COLS; c++) begin
            int unsigned s = first ? 0 : ref_acc[sent][c];
            for (int r = 0; r < ROWS; r++)
              for (int n = 0; n < N; n++) begin
                if (n > 0 && cur_m14) continue;
                s += W[r][c][n] * A[r][IX[r][c][n]];
              end
            ref_acc[sent][c] = s;
          end
          if (!first) n_accumulate++;
          sent++;
          if (sent === nrows) tile_end = 1;
        end else if (nrows === 0) begin
          tile_end = 1;
        end
      end
      @(negedge clk);
      if (session_done && t_done < 0) t_done = cyc;
      cyc++;
      if (cyc > 500) break;
    end
    act_valid = 0; tile_end = 0;
    n_sessions++;
    // the test session costs four cycles: activations are accepted from the fifth
    check(t_ready === 5, $sformatf("activations accepted %0d cycles after test_start (expected 5)", t_ready));
    check(t_done === ROWS + COLS + 5, $sformatf("report %0d cycles after test_start (expected %0d)", t_done, ROWS + COLS + 5));
  endtask

  task automatic expect_clean(input string what);
    check(!fault_detected, {what, ": no fault reported"});
    for (int c = 0; c < COLS; c++)
      check(col_fail[c] === 4'b0 && col_loc[c] === LOC_NONE, $sformatf("%s: column %0d clean (fail=%b loc=%s)", what, c, col_fail[c], col_loc[c].name()));
  endtask

  task automatic expect_fault(input int col, input loc_e loc, input string what);
    check(fault_detected, {what, ": fault reported"});
    for (int c = 0; c < COLS; c++) begin
      if (c === col) begin
        check(col_loc[c] === loc, $sformatf("%s: column %0d reports %s (got %s)", what, c, loc.name(), col_loc[c].name()));
        if (col_loc[c] === loc) n_loc[loc]++;
      end else begin
        check(col_fail[c] === 4'b0, $sformatf("%s: column %0d clean", what, c));
      end
    end
  endtask

  initial begin
    mode_1of4 = 0; w_we = 0; w_row = '0; w_data = '0; w_idx = '0; gv_i = '0; test_start = 0;
    act_valid = 0; act_first = 0; act_i = '0; act_addr = '0; tile_end = 0; acc_rd_addr = '0;
    #12 rst_n = 1;
    @(negedge clk);

    // ---------------- phase 1: fault free, three accumulated K-tiles ----------------
    for (int t = 0; t < 3; t++) begin
      new_tile();
      load_tile(t === 1);
      session_and_run(NA, t === 0);
      expect_clean($sformatf("tile %0d", t));
    end
    for (int j = 0; j < NA; j++) begin
      acc_rd_addr = 4'(j);
      #1;
      for (int c = 0; c < COLS; c++)
        check(acc_rd_data[c] === AW'(ref_acc[j][c]), $sformatf("C[%0d][%0d] = %h, expected %h", j, c, acc_rd_data[c], ref_acc[j][c]));
    end
    @(negedge clk);

    // ---------------- phase 2: fault injection ----------------
    new_tile();
    load_tile(0);
    // weight register: TPE(3,2), weight 0, one bit inverted
    begin
      logic [DW-1:0] wv = DW'(W[3][2][0]);
      force dut.u_array.g_row[3].g_col[2].u_tpe.w_q[0] = wv ^ 16'h0020;
      session_and_run(0, 1);
      release dut.u_array.g_row[3].g_col[2].u_tpe.w_q[0];
      load_tile(0);  // a released register keeps the forced value until rewritten
      expect_fault(2, LOC_WEIGHT_REG, "weight register");
    end
    // output register: TPE(5,6), bit 9 stuck at 1
    force dut.u_array.g_row[5].g_col[6].u_tpe.psum_o[9] = 1'b1;
    session_and_run(0, 1);
    release dut.u_array.g_row[5].g_col[6].u_tpe.psum_o[9];
    expect_fault(6, LOC_OUTPUT_REG, "output register");
    // south comparison adder of column 4, bit 3 stuck at 1
    force dut.g_south[4].u_acc.sum[3] = 1'b1;
    session_and_run(0, 1);
    release dut.g_south[4].u_acc.sum[3];
    expect_fault(4, LOC_COMPARE_ADDER, "comparison adder");
    // weight-index register: TPE(1,5), lane 0, a second index bit stuck at 1
    begin
      int unsigned p = IX[1][5][0];
      // force a second bit q such that element p OR element q of [1,2,3,4] differs from element p
      case (p)
        0: force dut.u_array.g_row[1].g_col[5].u_tpe.idx_q[0][1] = 1'b1;
        1: force dut.u_array.g_row[1].g_col[5].u_tpe.idx_q[0][0] = 1'b1;
        2: force dut.u_array.g_row[1].g_col[5].u_tpe.idx_q[0][3] = 1'b1;
        default: force dut.u_array.g_row[1].g_col[5].u_tpe.idx_q[0][0] = 1'b1;
      endcase
      session_and_run(0, 1);
      release dut.u_array.g_row[1].g_col[5].u_tpe.idx_q[0];
      load_tile(0);
      expect_fault(5, LOC_INDEX_REG, "weight-index register");
    end
    // activation register of TPE(2,1), element 3, bit 4 stuck at 1:
    // Test 4 must fail in columns 3 and 7 only, first error column 3.
    force dut.u_array.g_row[2].g_col[1].u_tpe.act_o[3][4] = 1'b1;
    session_and_run(0, 1);
    release dut.u_array.g_row[2].g_col[1].u_tpe.act_o[3][4];
    check(fault_detected, "activation register: fault reported");
    for (int c = 0; c < COLS; c++)
      check(col_fail[c][3] === (c === 3 || c === 7), $sformatf("activation register: Test 4 result of column %0d", c));
    check(act_err_valid && act_err_col === 3'd3, "activation register: first Test 4 error in column 3");
    if (act_err_valid && act_err_col === 3'd3) n_loc[LOC_ACT_REG]++;
    // fault removed: clean again
    session_and_run(0, 1);
    expect_clean("after release");

    // ---------------- mechanisms ----------------
    check(n_sessions > 0, "test sessions ran");
    check(n_t4_cycles > 0, "test_4 reached the array");
    check(n_tiles_24 > 0 && n_tiles_14 > 0, "both sparsity modes used");
    check(n_accumulate > 0, "accumulation across tiles");
    foreach (n_loc[l]) ;
    check(n_loc.exists(LOC_WEIGHT_REG) && n_loc.exists(LOC_OUTPUT_REG) && n_loc.exists(LOC_COMPARE_ADDER)
          && n_loc.exists(LOC_INDEX_REG) && n_loc.exists(LOC_ACT_REG), "every fault class located");
    $display("mechanisms: sessions=%0d test4_cycles=%0d tiles_2of4=%0d tiles_1of4=%0d accumulations=%0d located_classes=%0d",
             n_sessions, n_t4_cycles, n_tiles_24, n_tiles_14, n_accumulate, n_loc.num());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
