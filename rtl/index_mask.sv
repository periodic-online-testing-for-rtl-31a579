// index_mask: masking gates on the output of one weight-index register.
//
// The weight index is stored one-hot (M bits, one per element of the activation
// block). While test4_i is low the gates are transparent. While it is high they
// force the multiplexer to pick element POS: bit POS goes through an OR gate with
// test4_i, every other bit through an AND gate with the inverted test4_i. The array
// sets POS to (column mod M), so the first column selects the first element, the
// second column the second, and so on. One OR and M-1 AND gates per index register,
// as in the paper; the one-hot storage of the index is this design's reading of the
// four gate inputs drawn per register. Purely combinational.
module index_mask #(
  parameter int unsigned M   = sta_pkg::DEF_M,
  parameter int unsigned POS = 0
) (
  input  logic [M-1:0] idx_i,
  input  logic         test4_i,
  output logic [M-1:0] sel_o
);

  initial assert (POS < M) else $error("index_mask: POS must be below M");

  always_comb begin
    for (int unsigned k = 0; k < M; k++) begin
      if (k == POS) sel_o[k] = idx_i[k] | test4_i;
      else          sel_o[k] = idx_i[k] & ~test4_i;
    end
  end

endmodule
