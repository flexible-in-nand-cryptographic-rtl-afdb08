// shift_unit: shift unit (SU) of a block cipher engine.
//
// Two 32-bit barrel shifters of five levels (1, 2, 4, 8, 16 bits). A left
// shift reverses the bits, shifts right and reverses back, as in the BCE
// schematic's "Bit Reversal" path. In 64-bit mode the two shifters are joined
// over {in1,in0} and a sixth level of 32 bits is used. Each level fills with
// zeros (logical), copies of the sign bit (arithmetic right) or the bits
// shifted out (rotate), so levels compose. Combinational.
//
// amt is Control_SU (shift amount; bit 5 only counts in 64-bit mode). mode
// (kind, direction, width) is a field this design adds to the control word.
module shift_unit
  import fv_pkg::*;
(
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  input  logic [5:0]  amt,
  input  su_mode_t    mode,
  output logic [63:0] out
);
  function automatic logic [31:0] rev32(logic [31:0] v);
    for (int i = 0; i < 32; i++) rev32[i] = v[31-i];
  endfunction
  function automatic logic [63:0] rev64(logic [63:0] v);
    for (int i = 0; i < 64; i++) rev64[i] = v[63-i];
  endfunction

  // 32-bit barrel shifter, right-shifting core with bit reversal for left
  function automatic logic [31:0] bshift32(logic [31:0] v, logic [4:0] a, sh_kind_e k, logic left);
    logic [31:0] x;
    logic        arith;
    x = left ? rev32(v) : v;
    arith = (k == SH_ARI) && !left && v[31];
    for (int l = 0; l < 5; l++) begin
      if (a[l]) begin
        int unsigned n;
        n = 1 << l;
        if (k == SH_ROT) x = (x >> n) | (x << (32 - n));
        else             x = (x >> n) | (arith ? ~(32'hffff_ffff >> n) : 32'h0);
      end
    end
    return left ? rev32(x) : x;
  endfunction

  function automatic logic [63:0] bshift64(logic [63:0] v, logic [5:0] a, sh_kind_e k, logic left);
    logic [63:0] x;
    logic        arith;
    x = left ? rev64(v) : v;
    arith = (k == SH_ARI) && !left && v[63];
    for (int l = 0; l < 6; l++) begin
      if (a[l]) begin
        int unsigned n;
        n = 1 << l;
        if (k == SH_ROT) x = (x >> n) | (x << (64 - n));
        else             x = (x >> n) | (arith ? ~(64'hffff_ffff_ffff_ffff >> n) : 64'h0);
      end
    end
    return left ? rev64(x) : x;
  endfunction

  always_comb begin
    if (mode.w64) out = bshift64({in1, in0}, amt, mode.kind, mode.left);
    else          out = {bshift32(in1, amt[4:0], mode.kind, mode.left),
                         bshift32(in0, amt[4:0], mode.kind, mode.left)};
  end
endmodule
