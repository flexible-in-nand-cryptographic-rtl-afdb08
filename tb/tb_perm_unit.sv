// tb_perm_unit: checks the BCE permutation unit. Random switch settings are
// written to both banks; outputs are compared with a stage-by-stage model of
// the 64-bit Benes network written here, and with hand-worked single-switch
// cases (one inner switch, one outer switch) and the bypass and split modes.
module tb_perm_unit;
  import fv_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] in0, in1;
  logic [8:0]  ctrl;
  logic        cfg_we = 0;
  logic [0:0]  cfg_bank = 0;
  logic [3:0]  cfg_stage = 0;
  logic [31:0] cfg_data = 0;
  logic [63:0] out;
  logic [31:0] mdl [2][11];
  int checks = 0, failures = 0;

  perm_unit dut (.*);
  always #5 clk = ~clk;

  // column distances of the 64-bit network: 32,16,8,4,2,1,2,4,8,16,32
  function automatic logic [63:0] ref_perm(logic [63:0] v, int bank, bit comb);
    int dst [11] = '{32, 16, 8, 4, 2, 1, 2, 4, 8, 16, 32};
    logic [63:0] x;
    x = v;
    for (int s = 0; s < 11; s++) begin
      int k0, k1;
      logic [63:0] y;
      y = x; k0 = 0; k1 = 0;
      for (int i = 0; i < 64; i++) begin
        int d;
        d = dst[s];
        if ((i & d) == 0) begin
          bit sw;
          if (s == 0 || s == 10) begin sw = comb && mdl[bank][s][k0]; k0++; end
          else if (i < 32)       begin sw = mdl[bank][s][k0]; k0++; end
          else                   begin sw = mdl[bank][s][16 + k1]; k1++; end
          if (sw) begin y[i] = x[i+d]; y[i+d] = x[i]; end
        end
      end
      x = y;
    end
    return x;
  endfunction

  task automatic wr(int b, int s, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_bank = 1'(b); cfg_stage = 4'(s); cfg_data = d;
    @(negedge clk); cfg_we = 0;
    mdl[b][s] = d;
  endtask

  task automatic chk(logic [63:0] exp, string what);
    #1; checks++;
    if (out !== exp) begin
      failures++;
      if (failures < 10) $display("%s: ctrl=%h in=%h out=%h exp=%h", what, ctrl, {in1, in0}, out, exp);
    end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++) for (int s = 0; s < 11; s++) mdl[b][s] = '0;
    ctrl = '0; in0 = 0; in1 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // identity after reset
    in0 = 32'h1234_5678; in1 = 32'h9abc_def0; ctrl = 9'h001;
    chk({in1, in0}, "reset identity");
    // one inner switch: column 1 (distance 16), switch 0 of network 0 swaps bits 0 and 16
    wr(0, 1, 32'h0000_0001);
    in0 = 32'h0000_0001; in1 = 0; ctrl = 9'h000;
    chk(64'h0000_0000_0001_0000, "inner switch");
    wr(0, 1, 32'h0);
    // one outer switch in combined mode swaps bit 3 and bit 35
    wr(0, 0, 32'h0000_0008);
    in0 = 32'h0000_0008; in1 = 0; ctrl = 9'h001;
    chk(64'h0000_0008_0000_0000, "outer switch combined");
    ctrl = 9'h000;
    chk(64'h0000_0000_0000_0008, "outer switch held straight when split");
    // random settings, both banks, both modes
    for (int r = 0; r < 20; r++) begin
      for (int b = 0; b < 2; b++) for (int s = 0; s < 11; s++) wr(b, s, $urandom);
      for (int t = 0; t < 30; t++) begin
        int b;
        bit comb;
        b = $urandom_range(0, 1); comb = 1'($urandom);
        in0 = $urandom; in1 = $urandom;
        ctrl = {6'b0, 1'b0, 1'(b), comb};
        chk(ref_perm({in1, in0}, b, comb), "random");
        // a permutation keeps the number of ones
        checks++;
        if ($countones(out) != $countones({in1, in0})) failures++;
      end
    end
    ctrl = 9'h007; in0 = $urandom; in1 = $urandom;
    chk({in1, in0}, "bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
