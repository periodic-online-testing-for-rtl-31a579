// fault_locator: per-column evaluation of one online test session.
//
// It captures, for each of the four tests, the column output before the
// comparison (raw_i) and the adder output after it (res_i). A test fails when its
// result differs from the fault-free value: 0 for Tests 1, 3 and 4, all ones for
// Test 2. When Test 1 or Test 2 fails, the register type is found from two
// bit-wise complement checks, following the paper's localization table:
//   raw1 == ~raw2 and res1 == ~res2   -> weight register
//   raw1 != ~raw2 and res1 != ~res2   -> output register
//   raw1 == ~raw2 and res1 != ~res2   -> comparison adder (south accumulator)
//   otherwise                          -> unknown (no table entry)
// Otherwise a failing Test 3 points to a weight-index register and a failing
// Test 4 alone to an activation register. Which TPE of the column is faulty
// cannot be told.
// Interface: clear_i starts a session (drops done_o); each res_valid_i stores one
// result; done_o rises in the cycle after Test 4 has been stored and stays high.
// fail_o and loc_o are combinational from the stored values.
module fault_locator #(
  parameter int unsigned AW = sta_pkg::DEF_AW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear_i,
  input  logic               res_valid_i,
  input  sta_pkg::test_id_t  res_test_i,
  input  logic [AW-1:0]      raw_i,
  input  logic [AW-1:0]      res_i,
  output logic               done_o,
  output logic [3:0]         fail_o,
  output sta_pkg::loc_e      loc_o
);
  import sta_pkg::*;

  logic [3:0][AW-1:0] raw_q, res_q;
  logic               raw_comp, res_comp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw_q  <= '0;
      res_q  <= '0;
      done_o <= 1'b0;
    end else begin
      if (clear_i) done_o <= 1'b0;
      if (res_valid_i) begin
        raw_q[res_test_i] <= raw_i;
        res_q[res_test_i] <= res_i;
        if (res_test_i == TEST_ACT) done_o <= 1'b1;
      end
    end
  end

  always_comb begin
    fail_o[TEST_SUM]     = (res_q[TEST_SUM]     != '0);
    fail_o[TEST_NEG_SUM] = (res_q[TEST_NEG_SUM] != '1);
    fail_o[TEST_INDEX]   = (res_q[TEST_INDEX]   != '0);
    fail_o[TEST_ACT]     = (res_q[TEST_ACT]     != '0);
    raw_comp = (raw_q[TEST_SUM] == ~raw_q[TEST_NEG_SUM]);
    res_comp = (res_q[TEST_SUM] == ~res_q[TEST_NEG_SUM]);
    if (fail_o[TEST_SUM] || fail_o[TEST_NEG_SUM]) begin
      if (raw_comp && res_comp)        loc_o = LOC_WEIGHT_REG;
      else if (!raw_comp && !res_comp) loc_o = LOC_OUTPUT_REG;
      else if (raw_comp && !res_comp)  loc_o = LOC_COMPARE_ADDER;
      else                             loc_o = LOC_UNKNOWN;
    end else if (fail_o[TEST_INDEX]) begin
      loc_o = LOC_INDEX_REG;
    end else if (fail_o[TEST_ACT]) begin
      loc_o = LOC_ACT_REG;
    end else begin
      loc_o = LOC_NONE;
    end
  end

endmodule
