// acalu: asymmetric cipher ALU of the asymmetric cipher engine.
//
// A fixed 64-bit integer datapath for public-key and post-quantum
// arithmetic. Long integers are handled as 64-bit limbs: AC_ADD/AC_SUB take
// a carry (borrow) in and give one out, so a multi-limb sum is one
// instruction per limb. AC_MULLO/AC_MULHI give the halves of the 128-bit
// product. Modular add, subtract and multiply work modulo q (up to QW bits,
// operands already reduced); the product is reduced by Barrett reduction:
//   qhat = floor(x * mu / 2^(2*QW)),  mu = floor(2^(2*QW) / q),
//   r = x - qhat*q, then at most two subtractions of q.
// mu is supplied precomputed with q. The logic, permutation (64-bit Benes)
// and shift paths match the hash ALU's. Combinational.
// The unit list, 64-bit limbs and Barrett reduction follow the paper; the
// paper's Wallace-tree multiplier is left to synthesis ("*").
module acalu
  import fv_pkg::*;
#(
  parameter int unsigned QW = 32
) (
  input  logic [63:0]   in0,
  input  logic [63:0]   in1,
  input  logic          cin,
  input  acalu_ctrl_t   ctrl,
  input  logic [QW-1:0] q,
  input  logic [2*QW-1:0] mu,
  input  logic [351:0]  perm_cfg,
  output logic [63:0]   out,
  output logic          cout
);
  logic [127:0] prod;
  logic [64:0]  sum, dif;
  assign prod = in0 * in1;
  assign sum  = {1'b0, in0} + {1'b0, in1} + 65'(cin);
  assign dif  = {1'b0, in0} - {1'b0, in1} - 65'(cin);

  // Barrett reduction of x = in0*in1 (< q^2 < 2^(2QW))
  logic [2*QW-1:0] x;
  logic [4*QW-1:0] xmu;
  logic [2*QW-1:0] qhat, r0;
  logic [QW+1:0]   r1;
  logic [QW-1:0]   mmul;
  assign x    = prod[2*QW-1:0];
  assign xmu  = x * mu;
  assign qhat = xmu[4*QW-1:2*QW];
  assign r0   = x - qhat * {{QW{1'b0}}, q};
  always_comb begin
    r1 = r0[QW+1:0];
    if (r1 >= {2'b0, q}) r1 = r1 - {2'b0, q};
    if (r1 >= {2'b0, q}) r1 = r1 - {2'b0, q};
    mmul = r1[QW-1:0];
  end

  logic [QW:0] madd, msub;
  always_comb begin
    madd = {1'b0, in0[QW-1:0]} + {1'b0, in1[QW-1:0]};
    if (madd >= {1'b0, q}) madd = madd - {1'b0, q};
    if (in0[QW-1:0] >= in1[QW-1:0]) msub = {1'b0, in0[QW-1:0]} - {1'b0, in1[QW-1:0]};
    else                            msub = {1'b0, in0[QW-1:0]} + {1'b0, q} - {1'b0, in1[QW-1:0]};
  end

  logic [63:0] o_perm, o_sh;
  benes_net #(.W(64)) u_perm (.din(in0), .cfg(perm_cfg), .dout(o_perm));
  shift_unit u_sh (
    .in0(in0[31:0]), .in1(in0[63:32]), .amt(ctrl.amt),
    .mode('{w64: 1'b1, kind: ctrl.kind, left: ctrl.left}), .out(o_sh));

  always_comb begin
    cout = 1'b0;
    case (ctrl.op)
      AC_ADD:   begin out = sum[63:0]; cout = sum[64]; end
      AC_SUB:   begin out = dif[63:0]; cout = dif[64]; end
      AC_MULLO: out = prod[63:0];
      AC_MULHI: out = prod[127:64];
      AC_MADD:  out = 64'(madd[QW-1:0]);
      AC_MSUB:  out = 64'(msub[QW-1:0]);
      AC_MMUL:  out = 64'(mmul);
      AC_LOGIC: out = lcell64(ctrl.lc, in0, in1);
      AC_PERM:  out = o_perm;
      AC_SHIFT: out = o_sh;
      AC_CMP:   out = 64'(in0 < in1);
      default:  out = in0;
    endcase
  end
endmodule
