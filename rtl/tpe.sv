// tpe: tensor processing element of the weight-stationary sparse systolic array.
//
// A TPE stores N stationary weights (w_q) and, for each, a one-hot weight index
// (idx_q) naming which of the M elements of the incoming activation block the
// weight belongs to. Every cycle it selects up to N activations from the block
// arriving from the west (act_i), multiplies them with the weights, adds the
// products to the partial sum arriving from the north (psum_i) and stores the
// result in the output register (psum_o, to the south). The activation block is
// stored in the activation register (act_o, to the east). In 1:4 mode only the
// first multiplexer/multiplier contributes. This structure (two weight registers,
// two 4-to-1 multiplexers fed before the activation register, one adder, output
// register) follows the paper.
//
// Online test support: the masking gates (index_mask) on each index register force
// the selection of element COL mod M while test4_i is high. test4_i is carried
// east in a one-bit register next to the activation register so that it stays
// aligned with the skewed Test 4 vector; that register is this design's choice.
//
// Weights are loaded with w_we (one cycle, all N weights and indexes at once);
// the loading scheme is this design's own. Timing: psum_o and act_o are valid one
// cycle after act_i/psum_i. Asynchronous active-low reset clears every register.
module tpe #(
  parameter int unsigned M   = sta_pkg::DEF_M,
  parameter int unsigned N   = sta_pkg::DEF_N,
  parameter int unsigned DW  = sta_pkg::DEF_DW,
  parameter int unsigned AW  = sta_pkg::DEF_AW,
  parameter int unsigned COL = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  mode_1of4,
  // weight loading
  input  logic                  w_we,
  input  logic [N-1:0][DW-1:0]  w_i,
  input  logic [N-1:0][M-1:0]   idx_i,
  // horizontal flow
  input  logic [M-1:0][DW-1:0]  act_i,
  input  logic                  test4_i,
  output logic [M-1:0][DW-1:0]  act_o,
  output logic                  test4_o,
  // vertical flow
  input  logic [AW-1:0]         psum_i,
  output logic [AW-1:0]         psum_o
);

  logic [N-1:0][DW-1:0] w_q;     // weight registers
  logic [N-1:0][M-1:0]  idx_q;   // weight-index registers (one-hot)
  logic [N-1:0][M-1:0]  sel;     // selects after the masking gates
  logic [N-1:0][DW-1:0] act_sel; // multiplexer outputs
  logic [N-1:0][AW-1:0] prod;    // products, sign-extended to AW
  logic [AW-1:0]        sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q   <= '0;
      idx_q <= '0;
    end else if (w_we) begin
      w_q   <= w_i;
      idx_q <= idx_i;
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_lane
    index_mask #(.M(M), .POS(COL % M)) u_mask (
      .idx_i   (idx_q[n]),
      .test4_i (test4_i),
      .sel_o   (sel[n])
    );

    // One-hot AND-OR multiplexer.
    always_comb begin
      act_sel[n] = '0;
      for (int unsigned k = 0; k < M; k++)
        act_sel[n] |= act_i[k] & {DW{sel[n][k]}};
    end

    logic signed [2*DW-1:0] p;
    assign p = $signed(w_q[n]) * $signed(act_sel[n]);

    // Lane n > 0 is switched off in 1:4 mode.
    always_comb begin
      if (n > 0 && mode_1of4) prod[n] = '0;
      else                    prod[n] = AW'(p);
    end
  end

  always_comb begin
    sum = psum_i;
    for (int unsigned n = 0; n < N; n++) sum += prod[n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_o   <= '0;
      test4_o <= 1'b0;
      psum_o  <= '0;
    end else begin
      act_o   <= act_i;
      test4_o <= test4_i;
      psum_o  <= sum;
    end
  end

endmodule
