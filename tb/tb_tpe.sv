// tb_tpe: random test of one TPE (column 5, so Test 4 forces element 1).
// Each cycle it drives a random activation block, partial sum, test_4 and mode,
// reloads the weights now and then, and checks one cycle later that the output
// register holds psum + sum of weight*selected activation (lane 1 dropped in 1:4
// mode, selection forced to element 1 under test_4), and that the activation
// block and test_4 moved on unchanged. The expected values are computed here from
// plain integer arithmetic.
module tb_tpe;
  localparam int unsigned M = 4, N = 2, DW = 16, AW = 32, COL = 5;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 mode_1of4, w_we, test4_i, test4_o;
  logic [N-1:0][DW-1:0] w_i;
  logic [N-1:0][M-1:0]  idx_i;
  logic [M-1:0][DW-1:0] act_i, act_o;
  logic [AW-1:0]        psum_i, psum_o;

  tpe #(.M(M), .N(N), .DW(DW), .AW(AW), .COL(COL)) dut (.*);

  // Reference copy of the stored weights.
  int          rw  [N];
  int unsigned rix [N];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive_random(input bit load);
    mode_1of4 = ($urandom_range(0, 3) === 0);
    test4_i   = ($urandom_range(0, 3) === 0);
    for (int k = 0; k < M; k++) act_i[k] = DW'($urandom);
    psum_i = $urandom;
    w_we   = load;
    for (int n = 0; n < N; n++) begin
      w_i[n]   = DW'($urandom);
      idx_i[n] = M'(1 << $urandom_range(0, M - 1));
    end
  endtask

  initial begin
    longint exp_sum;
    logic [M-1:0][DW-1:0] exp_act;
    bit exp_t4;
    drive_random(0);
    w_we = 0;
    #12 rst_n = 1;
    // first load
    @(negedge clk);
    drive_random(1);
    for (int n = 0; n < N; n++) begin
      rw[n] = int'($signed(w_i[n]));
      for (int k = 0; k < M; k++) if (idx_i[n][k]) rix[n] = k;
    end
    @(negedge clk);
    for (int it = 0; it < 2000; it++) begin
      bit load = ($urandom_range(0, 15) === 0);
      drive_random(load);
      // expected output register value after this edge (weights before the edge)
      exp_sum = longint'(psum_i);
      for (int n = 0; n < N; n++) begin
        int unsigned e;
        if (n > 0 && mode_1of4) continue;
        e = test4_i ? (COL % M) : rix[n];
        exp_sum += longint'(rw[n]) * longint'($signed(act_i[e]));
      end
      exp_act = act_i;
      exp_t4  = test4_i;
      if (load) begin
        for (int n = 0; n < N; n++) begin
          rw[n] = int'($signed(w_i[n]));
          for (int k = 0; k < M; k++) if (idx_i[n][k]) rix[n] = k;
        end
      end
      @(negedge clk);
      checks++;
      if (psum_o !== AW'(exp_sum)) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d psum_o=%h exp=%h", it, psum_o, AW'(exp_sum));
      end
      checks++;
      if (act_o !== exp_act || test4_o !== exp_t4) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d activation/test_4 forwarding", it);
      end
    end
    // reset clears the registers
    rst_n = 0;
    #1;
    checks++;
    if (psum_o !== '0 || act_o !== '0 || test4_o !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
