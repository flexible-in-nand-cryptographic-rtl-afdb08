// tb_hash_alu: random self-check of the hash ALU's four units against
// reference code, including a stage-by-stage model of the 64-bit Benes
// network for random switch settings.
module tb_hash_alu;
  import fv_pkg::*;
  logic [63:0] in0, in1, modulus, out;
  halu_ctrl_t ctrl;
  logic [351:0] perm_cfg;
  int checks = 0, failures = 0;

  hash_alu dut (.*);

  function automatic logic [63:0] f(lc_op_e op, logic [63:0] a, logic [63:0] b);
    case (op) LC_XOR: return a ^ b; LC_AND: return a & b; LC_OR: return a | b; default: return ~a; endcase
  endfunction
  function automatic logic [63:0] benes(logic [63:0] v, logic [351:0] c);
    int dd [11] = '{32, 16, 8, 4, 2, 1, 2, 4, 8, 16, 32};
    for (int s = 0; s < 11; s++) begin
      int k; logic [63:0] y;
      y = v; k = 0;
      for (int i = 0; i < 64; i++)
        if ((i & dd[s]) == 0) begin
          if (c[s*32 + k]) begin y[i] = v[i+dd[s]]; y[i+dd[s]] = v[i]; end
          k++;
        end
      v = y;
    end
    return v;
  endfunction
  function automatic logic [31:0] sh32(logic [31:0] v, int n, sh_kind_e k, bit left);
    if (k == SH_ROT) return left ? ((v << n) | (v >> ((32 - n) % 32))) : ((v >> n) | (v << ((32 - n) % 32)));
    if (left) return v << n;
    if (k == SH_ARI) return $signed(v) >>> n;
    return v >> n;
  endfunction
  function automatic logic [63:0] sh64(logic [63:0] v, int n, sh_kind_e k, bit left);
    if (k == SH_ROT) return left ? ((v << n) | (v >> ((64 - n) % 64))) : ((v >> n) | (v << ((64 - n) % 64)));
    if (left) return v << n;
    if (k == SH_ARI) return $signed(v) >>> n;
    return v >> n;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic [63:0] exp;
      in0 = {$urandom, $urandom}; in1 = {$urandom, $urandom};
      modulus = {$urandom, $urandom} | 64'h8000_0000_0000_0000;
      for (int w = 0; w < 11; w++) perm_cfg[32*w +: 32] = $urandom;
      ctrl.sel = hu_sel_e'($urandom_range(0, 3));
      ctrl.add = ha_add_e'($urandom_range(0, 2));
      ctrl.lc_a = lc_op_e'($urandom_range(0, 3));
      ctrl.lc_b = lc_op_e'($urandom_range(0, 3));
      ctrl.lc_c = lc_op_e'($urandom_range(0, 3));
      ctrl.amt = 6'($urandom); ctrl.w32 = 1'($urandom);
      ctrl.kind = sh_kind_e'($urandom_range(0, 2)); ctrl.left = 1'($urandom);
      if (ctrl.add == HA_MODADD) begin in0 = in0 % modulus; in1 = in1 % modulus; end
      #1;
      case (ctrl.sel)
        HU_ADD: begin
          if (ctrl.add == HA_ADD64) exp = in0 + in1;
          else if (ctrl.add == HA_ADD32) exp = {32'(in0[63:32] + in1[63:32]), 32'(in0[31:0] + in1[31:0])};
          else exp = 64'(({1'b0, in0} + {1'b0, in1}) % {1'b0, modulus});
        end
        HU_LOGIC: exp = f(ctrl.lc_c, f(ctrl.lc_a, in0, in1), f(ctrl.lc_b, in0, in1));
        HU_PERM:  exp = benes(in0, perm_cfg);
        default:  exp = ctrl.w32 ? {sh32(in0[63:32], int'(ctrl.amt[4:0]), ctrl.kind, ctrl.left),
                                    sh32(in0[31:0], int'(ctrl.amt[4:0]), ctrl.kind, ctrl.left)}
                                 : sh64(in0, int'(ctrl.amt), ctrl.kind, ctrl.left);
      endcase
      checks++;
      if (out !== exp) begin
        failures++;
        if (failures < 10) $display("mismatch ctrl=%p in0=%h in1=%h out=%h exp=%h", ctrl, in0, in1, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
