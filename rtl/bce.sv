// bce: block cipher engine.
//
// Holds the five reconfigurable compute units of the BCE schematic - the
// arithmetic unit (AU), logical operation unit (LOU), permutation unit (PU),
// shift unit (SU) and table unit (TU) - all fed by the same two 32-bit inputs.
// Select2 (ctrl.sel) picks which unit's 64-bit result becomes Out_BCE; values
// above the TU code pass {in1,in0} unchanged. The result is registered, so
// Out_BCE appears one clock after the inputs (the register is this design's
// pipeline choice). Switch settings of the PU and tables of the TU are loaded
// through the cfg bundle, normally broadcast to every BCE of an array.
module bce
  import fv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  input  bce_ctrl_t   ctrl,
  input  bce_cfg_t    cfg,
  output logic [63:0] out,
  output logic        out_valid
);
  logic [63:0] o_au, o_lou, o_pu, o_su, o_tu, sel_q;

  arith_unit u_au  (.in0, .in1, .ctrl(ctrl.au),  .out(o_au));
  logic_unit u_lou (.in0, .in1, .ctrl(ctrl.loc), .out(o_lou));
  perm_unit #(.N_BANK(2)) u_pu (
    .clk, .rst_n, .in0, .in1, .ctrl(ctrl.pu),
    .cfg_we(cfg.pu_we), .cfg_bank(cfg.pu_bank), .cfg_stage(cfg.pu_stage), .cfg_data(cfg.pu_data),
    .out(o_pu));
  shift_unit u_su  (.in0, .in1, .amt(ctrl.su), .mode(ctrl.su_mode), .out(o_su));
  table_unit #(.N_UNIT(2), .N_SBOX(4)) u_tu (
    .clk, .in0, .in1, .ctrl(ctrl.tu),
    .tbl_we(cfg.tu_we), .tbl_sel(cfg.tu_sel), .tbl_addr(cfg.tu_addr), .tbl_data(cfg.tu_data),
    .out(o_tu));

  always_comb begin
    case (ctrl.sel)
      SEL_AU:  sel_q = o_au;
      SEL_LOU: sel_q = o_lou;
      SEL_PU:  sel_q = o_pu;
      SEL_SU:  sel_q = o_su;
      SEL_TU:  sel_q = o_tu;
      default: sel_q = {in1, in0};
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= en;
      if (en) out <= sel_q;
    end
  end
endmodule
