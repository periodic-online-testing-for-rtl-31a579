// tb_south_acc: random slot stream into one south-edge accumulator.
// Compute slots must add the column value into the addressed row (or store it
// when 'first' is set); test slots must produce raw = column value and
// res = column value + GV of that test one cycle later, without touching the
// accumulator rows; idle slots do nothing. A reference array kept here is
// compared with the read port after every cycle.
module tb_south_acc;
  import sta_pkg::*;
  localparam int unsigned AW = 32, ACC_DEPTH = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  slot_t               slot_i;
  logic [AW-1:0]       col_i;
  logic [3:0][AW-1:0]  gv_i;
  logic                res_valid_o;
  test_id_t            res_test_o;
  logic [AW-1:0]       raw_o, res_o;
  logic [3:0]          rd_addr;
  logic [AW-1:0]       rd_data;

  south_acc #(.AW(AW), .ACC_DEPTH(ACC_DEPTH)) dut (.*);

  logic [AW-1:0] ref_acc [ACC_DEPTH];
  int n_test = 0, n_comp = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    slot_t         s;
    logic [AW-1:0] v, exp_res;
    slot_i = '0; col_i = '0; gv_i = '0; rd_addr = '0;
    for (int i = 0; i < ACC_DEPTH; i++) ref_acc[i] = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      s = '0;
      case ($urandom_range(0, 2))
        0: s.kind = SLOT_IDLE;
        1: s.kind = SLOT_TEST;
        default: s.kind = SLOT_COMP;
      endcase
      s.test_id = test_id_t'($urandom_range(0, 3));
      s.first   = ($urandom_range(0, 4) === 0);
      s.addr    = ADDR_W'($urandom_range(0, ACC_DEPTH - 1));
      v = $urandom;
      for (int k = 0; k < 4; k++) gv_i[k] = $urandom;
      slot_i = s;
      col_i  = v;
      exp_res = v + gv_i[s.test_id];
      if (s.kind === SLOT_COMP) begin
        ref_acc[s.addr[3:0]] = (s.first ? '0 : ref_acc[s.addr[3:0]]) + v;
        n_comp++;
      end
      @(negedge clk);
      slot_i = '0;
      if (s.kind === SLOT_TEST) begin
        n_test++;
        checks++;
        if (!res_valid_o || res_test_o !== s.test_id || raw_o !== v || res_o !== exp_res) begin
          failures++;
          if (failures < 10) $display("FAIL test slot %0d: valid=%b raw=%h res=%h exp=%h", s.test_id, res_valid_o, raw_o, res_o, exp_res);
        end
      end else begin
        checks++;
        if (res_valid_o) failures++;
      end
      for (int a = 0; a < ACC_DEPTH; a++) begin
        rd_addr = 4'(a);
        #1;
        checks++;
        if (rd_data !== ref_acc[a]) begin
          failures++;
          if (failures < 10) $display("FAIL acc[%0d]=%h exp %h", a, rd_data, ref_acc[a]);
        end
      end
    end
    checks++;
    if (n_test === 0 || n_comp === 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
