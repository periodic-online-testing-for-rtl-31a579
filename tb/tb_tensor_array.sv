// tb_tensor_array: the 8x8 array at its default size, fed directly (this bench
// applies the input skew itself). It loads random 2:4 weight tiles row by row,
// streams random A rows, some of them with test_4 raised, in both sparsity modes,
// and checks every south-edge output against a sum computed here:
//   out[c] = sum over rows r, lanes n of w[r][c][n] * A[r][sel]
// with sel the stored index, or c mod M while test_4 is high (lane 1 ignored in
// 1:4 mode). A row j fed at cycle j must appear at column c after cycle j+c+ROWS-1.
module tb_tensor_array;
  localparam int unsigned ROWS = 8, COLS = 8, M = 4, N = 2, DW = 16, AW = 32;
  localparam int unsigned NA = 64;   // A rows per tile
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                             mode_1of4, w_we;
  logic [$clog2(ROWS)-1:0]          w_row;
  logic [COLS-1:0][N-1:0][DW-1:0]   w_data;
  logic [COLS-1:0][N-1:0][M-1:0]    w_idx;
  logic [ROWS-1:0][M-1:0][DW-1:0]   act_i;
  logic [ROWS-1:0]                  test4_i;
  logic [COLS-1:0][AW-1:0]          psum_i, psum_o;

  tensor_array #(.ROWS(ROWS), .COLS(COLS), .M(M), .N(N), .DW(DW), .AW(AW)) dut (.*);

  int          W   [ROWS][COLS][N];
  int unsigned IX  [ROWS][COLS][N];
  int          A   [NA][ROWS][M];
  bit          T4  [NA];
  int unsigned exp_out [NA][COLS];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(input bit m14);
    // random tile
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int unsigned i0 = $urandom_range(0, M - 2);
        IX[r][c][0] = i0;
        IX[r][c][1] = $urandom_range(i0 + 1, M - 1);
        for (int n = 0; n < N; n++) W[r][c][n] = $signed(16'($urandom));
      end
    for (int j = 0; j < NA; j++) begin
      T4[j] = ($urandom_range(0, 7) === 0);
      for (int r = 0; r < ROWS; r++) for (int k = 0; k < M; k++) A[j][r][k] = $signed(16'($urandom));
    end
    for (int j = 0; j < NA; j++)
      for (int c = 0; c < COLS; c++) begin
        int unsigned s = 0;
        for (int r = 0; r < ROWS; r++)
          for (int n = 0; n < N; n++) begin
            if (n > 0 && m14) continue;
            s += W[r][c][n] * A[j][r][T4[j] ? (c % M) : IX[r][c][n]];
          end
        exp_out[j][c] = s;
      end
    // load
    mode_1of4 = m14;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      w_we  = 1;
      w_row = r[$clog2(ROWS)-1:0];
      for (int c = 0; c < COLS; c++)
        for (int n = 0; n < N; n++) begin
          w_data[c][n] = DW'(W[r][c][n]);
          w_idx[c][n]  = M'(1 << IX[r][c][n]);
        end
    end
    @(negedge clk);
    w_we = 0;
    // stream: cycle k drives A[k-r] into row r; check A[j] at column c after edge j+c+ROWS-1
    for (int k = 0; k < NA + ROWS + COLS + 2; k++) begin
      for (int r = 0; r < ROWS; r++) begin
        int j = k - r;
        if (j >= 0 && j < NA) begin
          for (int e = 0; e < M; e++) act_i[r][e] = DW'(A[j][r][e]);
          test4_i[r] = T4[j];
        end else begin
          act_i[r]   = '0;
          test4_i[r] = 1'b0;
        end
      end
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        int j = k - c - int'(ROWS) + 1;
        if (j >= 0 && j < NA) begin
          checks++;
          if (psum_o[c] !== AW'(exp_out[j][c])) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d col %0d got %h exp %h", j, c, psum_o[c], exp_out[j][c]);
          end
        end
      end
    end
  endtask

  initial begin
    w_we = 0; w_row = '0; w_data = '0; w_idx = '0; act_i = '0; test4_i = '0;
    psum_i = '0; mode_1of4 = 0;
    #12 rst_n = 1;
    run_tile(0);
    run_tile(1);
    run_tile(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
