// tb_test_vector_gen: checks the four test slots against the test-vector table:
// Test 1 [1,1,1,1] with top sum 0, Test 2 [-1,-1,-1,-1] with -1, Tests 3 and 4
// [1,2,3,4] with 0, test_4 high only in Test 4.
module tb_test_vector_gen;
  localparam int unsigned M = 4, DW = 16, AW = 32;
  int checks = 0, failures = 0;

  sta_pkg::test_id_t     test_id;
  logic [M-1:0][DW-1:0]  vec_o;
  logic [AW-1:0]         sum_o;
  logic                  test4_o;

  test_vector_gen #(.M(M), .DW(DW), .AW(AW)) dut (.*);

  task automatic expect_slot(input int id, input int v0, v1, v2, v3, input int s, input bit t4);
    int exp_v [4];
    exp_v = '{v0, v1, v2, v3};
    test_id = sta_pkg::test_id_t'(id);
    #1;
    for (int k = 0; k < M; k++) begin
      checks++;
      if ($signed(vec_o[k]) !== exp_v[k]) begin
        failures++;
        $display("FAIL test %0d element %0d = %0d, expected %0d", id + 1, k, $signed(vec_o[k]), exp_v[k]);
      end
    end
    checks++;
    if ($signed(sum_o) !== s) begin
      failures++;
      $display("FAIL test %0d sum = %0d, expected %0d", id + 1, $signed(sum_o), s);
    end
    checks++;
    if (test4_o !== t4) begin
      failures++;
      $display("FAIL test %0d test_4 = %0b", id + 1, test4_o);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expect_slot(0,  1,  1,  1,  1,  0, 0);
    expect_slot(1, -1, -1, -1, -1, -1, 0);
    expect_slot(2,  1,  2,  3,  4,  0, 0);
    expect_slot(3,  1,  2,  3,  4,  0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
