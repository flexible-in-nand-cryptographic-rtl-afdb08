// arith_unit: arithmetic unit (AU) of a block cipher engine.
//
// Two arithmetic logics work side by side. Each takes two 16-bit operands,
// feeds them to an adder and a multiplier, and routes either result straight
// to the output or through a remainder circuit for modular arithmetic; the
// 16-bit result is zero-extended to 32 bits and the two are joined into the
// 64-bit Out_AU, as the BCE schematic prints. Purely combinational.
//
// Control_AU (6 bits, this design's encoding):
//   [1:0] op of logic 0, [3:2] op of logic 1: add, mul, mod add, mod mul
//   [5:4] modulus: 2^8, 2^16, 2^16+1, 2^4
// Mod 2^16+1 follows IDEA: an operand or result of 0 stands for 2^16, and the
// remainder is taken with the low-minus-high identity 2^16 = -1.
// Non-modular results keep the low 16 bits (the printed 16-bit output).
module arith_unit
  import fv_pkg::*;
#(
  parameter int unsigned OPW = 16
) (
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  input  logic [5:0]  ctrl,
  output logic [63:0] out
);
  logic [15:0] res [2];
  logic [31:0] opnd [2];
  assign opnd[0] = in0;
  assign opnd[1] = in1;

  au_mod_e modsel;
  assign modsel = au_mod_e'(ctrl[5:4]);

  for (genvar g = 0; g < 2; g++) begin : g_al
    logic [OPW-1:0] a, b;
    logic [16:0]    sum;
    logic [31:0]    prod;
    logic [16:0]    a1, b1;       // IDEA operands, 0 -> 2^16
    logic [33:0]    prod1;
    logic [17:0]    rem_add;
    logic [17:0]    rem_mul;
    au_op_e         op;
    assign a  = opnd[g][15:0];
    assign b  = opnd[g][31:16];
    assign op = au_op_e'(ctrl[2*g +: 2]);
    assign sum  = {1'b0, a} + {1'b0, b};
    assign prod = a * b;
    assign a1 = (a == '0) ? 17'h10000 : {1'b0, a};
    assign b1 = (b == '0) ? 17'h10000 : {1'b0, b};
    assign prod1 = a1 * b1;

    // Remainder circuit after the adder
    always_comb begin
      rem_add = '0;
      case (modsel)
        MOD_2P8:    rem_add = {10'd0, sum[7:0]};
        MOD_2P16:   rem_add = {2'd0, sum[15:0]};
        MOD_2P4:    rem_add = {14'd0, sum[3:0]};
        default:    rem_add = ({1'b0, sum} >= 18'd65537) ? {1'b0, sum} - 18'd65537 : {1'b0, sum};
      endcase
    end

    // Remainder circuit after the multiplier
    always_comb begin
      logic [16:0] hi;
      logic [15:0] lo;
      logic [17:0] r;
      hi = prod1[32:16];
      lo = prod1[15:0];
      r  = '0;
      rem_mul = '0;
      case (modsel)
        MOD_2P8:  rem_mul = {10'd0, prod[7:0]};
        MOD_2P16: rem_mul = {2'd0, prod[15:0]};
        MOD_2P4:  rem_mul = {14'd0, prod[3:0]};
        default: begin
          // x mod (2^16+1) = lo - hi, corrected once
          if ({1'b0, lo} >= hi) r = {2'b0, lo} - {1'b0, hi};
          else                  r = {2'b0, lo} + 18'd65537 - {1'b0, hi};
          rem_mul = r;
        end
      endcase
    end

    always_comb begin
      case (op)
        AU_ADD:  res[g] = sum[15:0];
        AU_MUL:  res[g] = prod[15:0];
        AU_MADD: res[g] = rem_add[15:0];
        default: res[g] = rem_mul[15:0];   // 2^16 wraps to 0 (IDEA)
      endcase
    end
  end

  assign out = {16'b0, res[1], 16'b0, res[0]};
endmodule
