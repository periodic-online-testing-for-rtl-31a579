// test_vector_gen: the online-test stimulus of one test slot.
//
// For test number test_id (0..3 for Tests 1..4) it returns the M-element vector
// fed to every row of the array, the value fed into the sum input of the top-row
// TPEs, and the test_4 control:
//   Test 1: [1,1,...,1]      sum  0   (column output = sum of weights V)
//   Test 2: [-1,-1,...,-1]   sum -1   (column output = ~V, the bit-wise complement)
//   Test 3: [1,2,...,M]      sum  0   (column output = sum of (index+1)*weight)
//   Test 4: [1,2,...,M]      sum  0   with test_4 high (forced selection)
// The values are those of the paper's test-vector table; the vector for Test 3/4
// is written for a general M. Purely combinational.
module test_vector_gen #(
  parameter int unsigned M  = sta_pkg::DEF_M,
  parameter int unsigned DW = sta_pkg::DEF_DW,
  parameter int unsigned AW = sta_pkg::DEF_AW
) (
  input  sta_pkg::test_id_t     test_id,
  output logic [M-1:0][DW-1:0]  vec_o,
  output logic [AW-1:0]         sum_o,
  output logic                  test4_o
);
  import sta_pkg::*;

  always_comb begin
    vec_o   = '0;
    sum_o   = '0;
    test4_o = 1'b0;
    unique case (test_id)
      TEST_SUM: begin
        for (int unsigned k = 0; k < M; k++) vec_o[k] = DW'(1);
      end
      TEST_NEG_SUM: begin
        for (int unsigned k = 0; k < M; k++) vec_o[k] = '1;  // -1
        sum_o = '1;                                          // -1
      end
      TEST_INDEX: begin
        for (int unsigned k = 0; k < M; k++) vec_o[k] = DW'(k + 1);
      end
      TEST_ACT: begin
        for (int unsigned k = 0; k < M; k++) vec_o[k] = DW'(k + 1);
        test4_o = 1'b1;
      end
      default: ;
    endcase
  end

endmodule
