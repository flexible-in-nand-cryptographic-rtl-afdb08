// logic_unit: logical operation unit (LOU) of a block cipher engine.
//
// Two logic cell blocks, one per 32-bit input. In each, logic cell A combines
// bytes 0 and 1, cell B bytes 2 and 3, and cell C combines the results of A
// and B; an output multiplexer picks one result, which may be inverted and is
// zero-extended by 24'b0 as the schematic prints. Out_LOU = {blk1, blk0}.
// Purely combinational.
//
// Control_LOC (9 bits, this design's encoding): [1:0],[3:2],[5:4] functions of
// cells A, B, C (XOR, AND, OR, NOT of the first operand); [7:6] output select
// (A, B, C, byte 0 unchanged); [8] invert the selected byte. The four
// functions come from the paper's list of supported logic operations.
module logic_unit
  import fv_pkg::*;
(
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  input  logic [8:0]  ctrl,
  output logic [63:0] out
);
  logic [31:0] blk_in [2];
  logic [7:0]  res    [2];
  assign blk_in[0] = in0;
  assign blk_in[1] = in1;

  for (genvar g = 0; g < 2; g++) begin : g_lcb
    logic [7:0] ca, cb, cc, sel;
    assign ca = lcell8(lc_op_e'(ctrl[1:0]), blk_in[g][7:0],   blk_in[g][15:8]);
    assign cb = lcell8(lc_op_e'(ctrl[3:2]), blk_in[g][23:16], blk_in[g][31:24]);
    assign cc = lcell8(lc_op_e'(ctrl[5:4]), ca, cb);
    always_comb begin
      case (ctrl[7:6])
        2'd0:    sel = ca;
        2'd1:    sel = cb;
        2'd2:    sel = cc;
        default: sel = blk_in[g][7:0];
      endcase
    end
    assign res[g] = ctrl[8] ? ~sel : sel;
  end

  assign out = {24'b0, res[1], 24'b0, res[0]};
endmodule
