// tb_acalu: checks the asymmetric cipher ALU: Barrett modular multiply, add
// and subtract for the Dilithium, Falcon and random 32-bit moduli against the
// % operator, a 256-bit addition done limb by limb with the carry, the
// 128-bit product halves, compare, logic and shift.
module tb_acalu;
  import fv_pkg::*;
  logic [63:0] in0, in1, out;
  logic cin, cout;
  acalu_ctrl_t ctrl;
  logic [31:0] q;
  logic [63:0] mu;
  logic [351:0] perm_cfg = '0;
  int checks = 0, failures = 0;

  acalu dut (.*);

  task automatic chk(logic [63:0] exp, string what);
    #1; checks++;
    if (out !== exp) begin
      failures++;
      if (failures < 10) $display("%s: in0=%h in1=%h q=%0d out=%h exp=%h", what, in0, in1, q, out, exp);
    end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [127:0] big;
    ctrl = '0; cin = 0;
    for (int m = 0; m < 3; m++) begin
      q = (m == 0) ? 32'd8380417 : (m == 1) ? 32'd12289 : ($urandom | 32'h8000_0001);
      mu = 64'((128'd1 << 64) / q);
      for (int i = 0; i < 1000; i++) begin
        logic [63:0] a, b;
        a = 64'($urandom % q); b = 64'($urandom % q);
        in0 = a; in1 = b;
        ctrl.op = AC_MMUL; chk((a * b) % q, "mmul");
        ctrl.op = AC_MADD; chk((a + b) % q, "madd");
        ctrl.op = AC_MSUB; chk((a + q - b) % q, "msub");
      end
    end
    // 256-bit addition, one 64-bit limb per step
    for (int t = 0; t < 100; t++) begin
      logic [255:0] x, y, s;
      logic c;
      x = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      y = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      c = 0; s = 0;
      ctrl.op = AC_ADD;
      for (int l = 0; l < 4; l++) begin
        in0 = x[64*l +: 64]; in1 = y[64*l +: 64]; cin = c; #1;
        s[64*l +: 64] = out; c = cout;
      end
      checks++;
      if ({c, s} !== {1'b0, x} + {1'b0, y}) begin failures++; $display("256-bit add wrong"); end
    end
    cin = 0;
    for (int i = 0; i < 500; i++) begin
      in0 = {$urandom, $urandom}; in1 = {$urandom, $urandom};
      big = in0 * in1;
      ctrl.op = AC_MULLO; chk(big[63:0], "mullo");
      ctrl.op = AC_MULHI; chk(big[127:64], "mulhi");
      ctrl.op = AC_CMP;   chk(64'(in0 < in1), "cmp");
      ctrl.op = AC_LOGIC; ctrl.lc = LC_AND; chk(in0 & in1, "and");
      ctrl.op = AC_SHIFT; ctrl.amt = 6'($urandom); ctrl.kind = SH_ROT; ctrl.left = 1;
      chk((in0 << ctrl.amt) | (in0 >> ((64 - int'(ctrl.amt)) % 64)), "rotl");
      ctrl.op = AC_PERM; chk(in0, "perm identity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
