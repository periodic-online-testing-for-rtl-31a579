// tb_index_mask: exhaustive check of the test_4 masking gates for every forced
// position of a 4-element block. With test_4 low the select must equal the stored
// index; with test_4 high it must be one-hot at POS whatever the index holds.
module tb_index_mask;
  localparam int unsigned M = 4;
  int checks = 0, failures = 0;

  logic [M-1:0] idx;
  logic         t4;
  logic [M-1:0] sel [M];

  for (genvar p = 0; p < M; p++) begin : g_dut
    index_mask #(.M(M), .POS(p)) dut (.idx_i(idx), .test4_i(t4), .sel_o(sel[p]));
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2; t++) begin
      for (int i = 0; i < (1 << M); i++) begin
        idx = M'(i);
        t4  = t[0];
        #1;
        for (int p = 0; p < M; p++) begin
          logic [M-1:0] exp_sel;
          exp_sel = t4 ? M'(1 << p) : idx;
          checks++;
          if (sel[p] !== exp_sel) begin
            failures++;
            $display("FAIL pos=%0d idx=%b t4=%b sel=%b exp=%b", p, idx, t4, sel[p], exp_sel);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
