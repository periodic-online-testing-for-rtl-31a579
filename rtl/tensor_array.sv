// tensor_array: ROWS x COLS grid of TPEs (weight-stationary sparse systolic array).
//
// Activation blocks of M elements enter each row at the west edge and move one
// TPE east per cycle through the activation registers; partial sums enter each
// column at the north edge and move one TPE south per cycle through the output
// registers. Row r of the array holds the weights of the r-th M-element block of
// the K dimension, so one tile covers K = ROWS*M and COLS output columns. The
// inputs of this module are expected already skewed (row r one cycle after row
// r-1, column c one cycle after column c-1); the top adds that skew.
//
// Weight loading: when w_we is high, row w_row of TPEs takes w_data/w_idx, one
// entry per column (this loading scheme is this design's own).
// Timing: a block entering row r at cycle t is used by TPE(r,c) at t+c; the sum of
// column c leaves the south edge (psum_o[c]) ROWS cycles after its top-row TPE
// was used. test4_i travels with the activation block of its row.
module tensor_array #(
  parameter int unsigned ROWS = sta_pkg::DEF_ROWS,
  parameter int unsigned COLS = sta_pkg::DEF_COLS,
  parameter int unsigned M    = sta_pkg::DEF_M,
  parameter int unsigned N    = sta_pkg::DEF_N,
  parameter int unsigned DW   = sta_pkg::DEF_DW,
  parameter int unsigned AW   = sta_pkg::DEF_AW,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              mode_1of4,
  input  logic                              w_we,
  input  logic [RW-1:0]                     w_row,
  input  logic [COLS-1:0][N-1:0][DW-1:0]    w_data,
  input  logic [COLS-1:0][N-1:0][M-1:0]     w_idx,
  input  logic [ROWS-1:0][M-1:0][DW-1:0]    act_i,
  input  logic [ROWS-1:0]                   test4_i,
  input  logic [COLS-1:0][AW-1:0]           psum_i,
  output logic [COLS-1:0][AW-1:0]           psum_o
);

  // act[r][c] / t4[r][c]: west input of TPE(r,c); index COLS is the east edge.
  logic [M-1:0][DW-1:0] act [ROWS][COLS+1];
  logic                 t4  [ROWS][COLS+1];
  // ps[r][c]: north input of TPE(r,c); index ROWS is the south edge.
  logic [AW-1:0]        ps  [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_west
    assign act[r][0] = act_i[r];
    assign t4[r][0]  = test4_i[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_ns
    assign ps[0][c]   = psum_i[c];
    assign psum_o[c]  = ps[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      tpe #(.M(M), .N(N), .DW(DW), .AW(AW), .COL(c)) u_tpe (
        .clk       (clk),
        .rst_n     (rst_n),
        .mode_1of4 (mode_1of4),
        .w_we      (w_we && (w_row == RW'(r))),
        .w_i       (w_data[c]),
        .idx_i     (w_idx[c]),
        .act_i     (act[r][c]),
        .test4_i   (t4[r][c]),
        .act_o     (act[r][c+1]),
        .test4_o   (t4[r][c+1]),
        .psum_i    (ps[r][c]),
        .psum_o    (ps[r+1][c])
      );
    end
  end

endmodule
