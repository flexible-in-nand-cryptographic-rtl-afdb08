// tb_bce: drives each of the five units of one block cipher engine through
// Select2 and checks the registered Out_BCE (one-cycle latency) against
// values worked out here.
module tb_bce;
  import fv_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] in0 = 0, in1 = 0;
  bce_ctrl_t ctrl;
  bce_cfg_t  cfg;
  logic [63:0] out;
  logic out_valid;
  int checks = 0, failures = 0;

  bce dut (.*);
  always #5 clk = ~clk;

  task automatic run(logic [63:0] exp, string what);
    @(negedge clk); en = 1;
    @(negedge clk); en = 0;
    checks++;
    if (!out_valid || out !== exp) begin
      failures++;
      $display("%s: out=%h exp=%h v=%b", what, out, exp, out_valid);
    end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ctrl = '0; cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // table t holds x -> x ^ (t+1)*0x11
    for (int t = 0; t < 8; t++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk); cfg.tu_we = 1; cfg.tu_sel = 3'(t); cfg.tu_addr = 8'(a); cfg.tu_data = 8'(a ^ ((t + 1) * 'h11));
      end
    @(negedge clk); cfg = '0;
    for (int i = 0; i < 200; i++) begin
      logic [63:0] v, e;
      in0 = $urandom; in1 = $urandom; v = {in1, in0};
      // AU: 16-bit add on both logics
      ctrl = '0; ctrl.sel = SEL_AU; ctrl.au = 6'b01_00_00;
      run({16'b0, 16'(in1[15:0] + in1[31:16]), 16'b0, 16'(in0[15:0] + in0[31:16])}, "AU add");
      // LOU: cell A XOR, output A
      ctrl = '0; ctrl.sel = SEL_LOU;
      run({24'b0, in1[7:0] ^ in1[15:8], 24'b0, in0[7:0] ^ in0[15:8]}, "LOU xor");
      // PU: identity after reset
      ctrl = '0; ctrl.sel = SEL_PU; ctrl.pu = 9'h1;
      run(v, "PU identity");
      // SU: 64-bit rotate left by 13
      ctrl = '0; ctrl.sel = SEL_SU; ctrl.su = 6'd13; ctrl.su_mode = '{w64: 1'b1, kind: SH_ROT, left: 1'b1};
      run((v << 13) | (v >> 51), "SU rotl");
      // TU: byte substitution
      ctrl = '0; ctrl.sel = SEL_TU;
      for (int b = 0; b < 8; b++) e[8*b +: 8] = v[8*b +: 8] ^ 8'((b + 1) * 'h11);
      run(e, "TU");
      ctrl = '0; ctrl.sel = SEL_PASS;
      run(v, "pass");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
