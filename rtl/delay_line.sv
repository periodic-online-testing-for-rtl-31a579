// delay_line: W-bit shift register of DEPTH stages (DEPTH=0 is a wire).
//
// Used for the systolic skew at the array edges: row r of the west inputs is
// delayed r cycles, the north sum input of column c is delayed c cycles, and the
// slot tag that tells the south accumulator of column c what arrives is delayed
// ROWS+c cycles. Registers reset to zero (asynchronous, active low). The skew
// itself is implied by the systolic timing; this shift-register form is this
// design's own.
module delay_line #(
  parameter int unsigned W     = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d_i,
  output logic [W-1:0] q_o
);

  if (DEPTH == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_reg
    logic [W-1:0] stage [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= d_i;
        for (int unsigned i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q_o = stage[DEPTH-1];
  end

endmodule
