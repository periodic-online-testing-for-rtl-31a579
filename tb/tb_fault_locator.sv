// tb_fault_locator: one session per fault case, with the column values built
// here from a random weight sum V and the golden values GV1=-V, GV2=V:
//   fault free      raw1=V,     raw2=~V,     results 0,-1,0,0        -> none
//   weight register raw1=V+e,   raw2=~(V+e)                          -> weight
//   output register raw1=V+e,   raw2=~V (stuck bit hits one test)    -> output
//   comparison adder results forced to have a stuck-at-1 bit          -> adder
//   only Test 3 wrong                                                 -> index
//   only Test 4 wrong                                                 -> activation
//   raw not complementary but results complementary                   -> unknown
// It also checks that done rises the cycle after Test 4 and clear drops it.
module tb_fault_locator;
  import sta_pkg::*;
  localparam int unsigned AW = 32;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           clear_i, res_valid_i, done_o;
  test_id_t       res_test_i;
  logic [AW-1:0]  raw_i, res_i;
  logic [3:0]     fail_o;
  loc_e           loc_o;

  fault_locator #(.AW(AW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic session(input logic [AW-1:0] r1, r2, s1, s2, s3, s4, input loc_e exp_loc, input logic [3:0] exp_fail);
    logic [AW-1:0] raws [4];
    logic [AW-1:0] ress [4];
    raws = '{r1, r2, 32'd0, 32'd0};
    ress = '{s1, s2, s3, s4};
    @(negedge clk);
    clear_i = 1;
    @(negedge clk);
    clear_i = 0;
    checks++;
    if (done_o) failures++;
    for (int t = 0; t < 4; t++) begin
      res_valid_i = 1;
      res_test_i  = test_id_t'(t);
      raw_i = raws[t];
      res_i = ress[t];
      @(negedge clk);
      res_valid_i = 0;
      if (t < 3) begin
        checks++;
        if (done_o) failures++;
      end
    end
    checks++;
    if (!done_o || loc_o !== exp_loc || fail_o !== exp_fail) begin
      failures++;
      $display("FAIL expected %s fail=%b, got %s fail=%b done=%b", exp_loc.name(), exp_fail, loc_o.name(), fail_o, done_o);
    end
  endtask

  initial begin
    logic [AW-1:0] V, e, r1, r2;
    clear_i = 0; res_valid_i = 0; res_test_i = TEST_SUM; raw_i = '0; res_i = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      V = $urandom;
      e = $urandom_range(1, 1000);
      // fault free
      session(V, ~V, V - V, ~V + V, '0, '0, LOC_NONE, 4'b0000);
      // weight register: both tests see the same wrong sum V+e
      r1 = V + e; r2 = ~(V + e);
      session(r1, r2, r1 - V, r2 + V, e, e, LOC_WEIGHT_REG, 4'b1111);
      // output register stuck-at-1 on bit b: hits the test whose bit b was 0
      begin
        int b = $urandom_range(0, AW - 1);
        r1 = V | (32'd1 << b); r2 = ~V | (32'd1 << b);
        session(r1, r2, r1 - V, r2 + V, '0, '0, LOC_OUTPUT_REG, {2'b00, r2 !== ~V, r1 !== V});
      end
      // comparison adder output bit stuck at 1
      begin
        int b = $urandom_range(0, AW - 1);
        session(V, ~V, 32'd1 << b, '1, 32'd1 << b, 32'd1 << b, LOC_COMPARE_ADDER, 4'b1101);
      end
      // weight-index register: only Test 3 wrong
      session(V, ~V, '0, '1, e, '0, LOC_INDEX_REG, 4'b0100);
      // activation register: only Test 4 wrong
      session(V, ~V, '0, '1, '0, e, LOC_ACT_REG, 4'b1000);
      // no table entry
      session(V, V, e, ~e, '0, '0, LOC_UNKNOWN, 4'b0011);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
