// hash_alu: one hash ALU (HALU) of the asymmetric cipher engine.
//
// Four units on two 64-bit inputs, chosen by a 4:1 output multiplexer:
//  * modular addition unit: a 64-bit add, two independent 32-bit adds (the
//    word size of SHA-256), or an add reduced by one conditional subtraction
//    of a programmable modulus (operands are taken as already reduced);
//  * logic unit: cells A and B apply XOR/AND/OR/NOT to the inputs, cell C
//    combines their results, which yields choice/majority style terms in two
//    steps;
//  * permutation unit: a 64-bit Benes network (butterfly plus inverse
//    butterfly) with externally held switch settings;
//  * shift unit: logical, arithmetic and circular shifts of in0 as one 64-bit
//    word or as two 32-bit words.
// Combinational. The unit set and the 4:1 mux follow the HALU figure; the
// adder modes and control encoding are this design's.
module hash_alu
  import fv_pkg::*;
(
  input  logic [63:0]  in0,
  input  logic [63:0]  in1,
  input  halu_ctrl_t   ctrl,
  input  logic [351:0] perm_cfg,
  input  logic [63:0]  modulus,
  output logic [63:0]  out
);
  logic [63:0] o_add, o_log, o_perm, o_sh;

  // modular addition unit
  always_comb begin
    logic [64:0] s;
    s = {1'b0, in0} + {1'b0, in1};
    case (ctrl.add)
      HA_ADD32: o_add = {in0[63:32] + in1[63:32], in0[31:0] + in1[31:0]};
      HA_MODADD: o_add = (s >= {1'b0, modulus}) ? 64'(s - {1'b0, modulus}) : s[63:0];
      default:  o_add = s[63:0];
    endcase
  end

  // logic unit: three logic cells
  logic [63:0] ca, cb;
  assign ca    = lcell64(ctrl.lc_a, in0, in1);
  assign cb    = lcell64(ctrl.lc_b, in0, in1);
  assign o_log = lcell64(ctrl.lc_c, ca, cb);

  // permutation unit
  benes_net #(.W(64)) u_perm (.din(in0), .cfg(perm_cfg), .dout(o_perm));

  // shift unit
  shift_unit u_sh (
    .in0(in0[31:0]), .in1(in0[63:32]), .amt(ctrl.amt),
    .mode('{w64: !ctrl.w32, kind: ctrl.kind, left: ctrl.left}), .out(o_sh));

  always_comb begin
    case (ctrl.sel)
      HU_ADD:   out = o_add;
      HU_LOGIC: out = o_log;
      HU_PERM:  out = o_perm;
      default:  out = o_sh;
    endcase
  end
endmodule
