// tb_shift_unit: random self-check of the BCE shift unit against the
// language's shift operators.
module tb_shift_unit;
  import fv_pkg::*;
  logic [31:0] in0, in1;
  logic [5:0]  amt;
  su_mode_t    mode;
  logic [63:0] out;
  int checks = 0, failures = 0;

  shift_unit dut (.*);

  function automatic logic [31:0] r32(logic [31:0] v, int n, int k, bit left);
    if (k == 2) return left ? ((v << n) | (v >> ((32 - n) % 32))) : ((v >> n) | (v << ((32 - n) % 32)));
    if (left) return v << n;
    if (k == 1) return $signed(v) >>> n;
    return v >> n;
  endfunction
  function automatic logic [63:0] r64(logic [63:0] v, int n, int k, bit left);
    if (k == 2) return left ? ((v << n) | (v >> ((64 - n) % 64))) : ((v >> n) | (v << ((64 - n) % 64)));
    if (left) return v << n;
    if (k == 1) return $signed(v) >>> n;
    return v >> n;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic [63:0] exp;
      in0 = $urandom; in1 = $urandom; amt = 6'($urandom);
      mode.w64 = 1'($urandom); mode.left = 1'($urandom);
      mode.kind = sh_kind_e'($urandom_range(0, 2));
      #1;
      if (mode.w64) exp = r64({in1, in0}, int'(amt), int'(mode.kind), mode.left);
      else exp = {r32(in1, int'(amt[4:0]), int'(mode.kind), mode.left),
                  r32(in0, int'(amt[4:0]), int'(mode.kind), mode.left)};
      checks++;
      if (out !== exp) begin
        failures++;
        if (failures < 10) $display("mismatch mode=%p amt=%0d in=%h out=%h exp=%h", mode, amt, {in1, in0}, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
