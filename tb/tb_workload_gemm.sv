// tb_workload_gemm: convolution layers of the evaluated CNNs, run as tiled
// matrix products on the full 8x8 array with a test session on every tile.
//
// A layer is the product C = A*W of im2col activations A (P output pixels x K)
// and 2:4-pruned weights W (K x F filters). The bench cuts W into tiles of
// K = ROWS*M = 32 by COLS = 8, loads each tile, runs the four-vector session
// (which must report no fault), streams up to ACC_DEPTH rows of A and
// accumulates over the K-tiles in the south accumulators, then compares every
// output with a product computed here. Layer shapes (own knowledge of the
// networks, not from the paper) are cut to 16 output pixels:
//   ResNet50    conv2_x 1x1 reduce : K =  64, F =  64
//   DenseNet121 block-1 1x1        : K = 128, F = 128
//   VGG16       conv1_2 3x3        : K = 576, F =  64
// It also reports the cycles spent in test slots against all cycles.
module tb_workload_gemm;
  import sta_pkg::*;
  localparam int ROWS = 8, COLS = 8, M = 4, N = 2, DW = 16, AW = 32, ACC_DEPTH = 16;
  localparam int KT = ROWS * M;
  localparam int P = 16;
  localparam int KMAX = 576, FMAX = 128;
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

  // layer data: dense weights with zeros, plus their 2:4 index positions
  int A  [P][KMAX];
  int Wd [KMAX][FMAX];
  int WI [KMAX/M][FMAX][N];   // positions of the two kept weights of each block
  longint cycles = 0, test_cycles = 0, sessions = 0;

  always @(posedge clk) begin
    cycles++;
    if (state_o === ST_TEST) test_cycles++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_layer(input int K, input int F);
    for (int p = 0; p < P; p++) for (int k = 0; k < K; k++) A[p][k] = $urandom_range(0, 510) - 255;
    for (int b = 0; b < K / M; b++)
      for (int f = 0; f < F; f++) begin
        int i0 = $urandom_range(0, M - 2);
        int i1 = $urandom_range(i0 + 1, M - 1);
        WI[b][f][0] = i0;
        WI[b][f][1] = i1;
        for (int e = 0; e < M; e++) Wd[b*M+e][f] = 0;
        Wd[b*M+i0][f] = $urandom_range(0, 510) - 255;
        Wd[b*M+i1][f] = $urandom_range(0, 510) - 255;
      end
  endtask

  task automatic run_tile(input int kt, input int ct, input bit first);
    // load
    while (!w_ready) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      int b = kt * ROWS + r;
      w_we  = 1;
      w_row = 3'(r);
      for (int c = 0; c < COLS; c++)
        for (int n = 0; n < N; n++) begin
          w_data[c][n] = DW'(Wd[b*M + WI[b][ct*COLS+c][n]][ct*COLS+c]);
          w_idx[c][n]  = M'(1 << WI[b][ct*COLS+c][n]);
        end
      @(negedge clk);
    end
    w_we = 0;
    for (int c = 0; c < COLS; c++) begin
      int s = 0, sx = 0;
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < N; n++) begin
          int b = kt * ROWS + r;
          int w = Wd[b*M + WI[b][ct*COLS+c][n]][ct*COLS+c];
          s  += w;
          sx += w * (WI[b][ct*COLS+c][n] + 1);
        end
      gv_i[c] = {AW'(-(c % M + 1) * s), AW'(-sx), AW'(s), AW'(-s)};
    end
    // session, then the P rows
    test_start = 1;
    @(negedge clk);
    test_start = 0;
    begin
      int sent = 0;
      bit done_seen = 0;
      while (state_o !== ST_IDLE || !done_seen) begin
        act_valid = 0; tile_end = 0;
        if (act_ready && sent < P) begin
          for (int r = 0; r < ROWS; r++) for (int e = 0; e < M; e++)
            act_i[r][e] = DW'(A[sent][kt*KT + r*M + e]);
          act_valid = 1; act_first = first; act_addr = ADDR_W'(sent);
          sent++;
          if (sent === P) tile_end = 1;
        end
        @(negedge clk);
        if (session_done) begin
          done_seen = 1;
          checks++;
          if (fault_detected) begin
            failures++;
            $display("FAIL session of tile k%0d c%0d reports a fault", kt, ct);
          end
        end
      end
      act_valid = 0; tile_end = 0;
      sessions++;
    end
  endtask

  task automatic run_layer(input string name, input int K, input int F);
    longint c0 = cycles, t0 = test_cycles;
    make_layer(K, F);
    for (int ct = 0; ct < F / COLS; ct++) begin
      for (int kt = 0; kt < K / KT; kt++) run_tile(kt, ct, kt === 0);
      for (int p = 0; p < P; p++) begin
        acc_rd_addr = 4'(p);
        #1;
        for (int c = 0; c < COLS; c++) begin
          int unsigned s = 0;
          for (int k = 0; k < K; k++) s += A[p][k] * Wd[k][ct*COLS+c];
          checks++;
          if (acc_rd_data[c] !== AW'(s)) begin
            failures++;
            if (failures < 10) $display("FAIL %s C[%0d][%0d] = %h expected %h", name, p, ct*COLS+c, acc_rd_data[c], s);
          end
        end
      end
      @(negedge clk);  // back on the falling edge after the reads
    end
    $display("%s: K=%0d F=%0d P=%0d, %0d tiles, %0d cycles, %0d in test slots",
             name, K, F, P, (K / KT) * (F / COLS), cycles - c0, test_cycles - t0);
  endtask

  initial begin
    mode_1of4 = 0; w_we = 0; w_row = '0; w_data = '0; w_idx = '0; gv_i = '0; test_start = 0;
    act_valid = 0; act_first = 0; act_i = '0; act_addr = '0; tile_end = 0; acc_rd_addr = '0;
    #12 rst_n = 1;
    @(negedge clk);
    run_layer("ResNet50 conv2_x 1x1", 64, 64);
    run_layer("DenseNet121 block1 1x1", 128, 128);
    run_layer("VGG16 conv1_2 3x3", 576, 64);
    checks++;
    if (sessions === 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
