// crypto_engine: one FlashVault cryptographic engine.
//
// Datapath of the engine in the architecture figure: the inbound FIFO
// (64 -> 1024 bits) hands codewords to the LDPC decoder, whose 896 data bits
// are written as two 512-bit rows into the Data RF (DRF). The DRF and the
// Cache RF (CRF) exchange rows; the key generation engine (KGE) writes derived
// keys, gathered from its two 32-bit ports into a 512-bit staging register,
// into the CRF. The 512-bit router connects the CRF, the BCE array, the ACE
// and the output register. The ACE also reads and writes the output register
// directly. For programs, DRF rows go into the outbound FIFO (512 -> 64 bits)
// towards the planes.
//
// Every move is commanded by the control unit through ctrl (one eng_ctrl_t
// per cycle); stat reports completion events and levels back. Register-file
// reads have one cycle of latency; everything the router moves is written in
// the same cycle. The set of blocks and link widths follow the figure; the
// control word and the staging register are this design's.
//
// Lint notes: the inbound FIFO's fill count, the decoder's flip count, the
// KGE busy flag and the ACE instr_ready (always 1) are not needed by the
// control flow and are left open or unread on purpose.
module crypto_engine
  import fv_pkg::*;
#(
  parameter int unsigned N_BCE  = 16,
  parameter int unsigned N_HALU = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  eng_ctrl_t    ctrl,
  output eng_stat_t    stat,
  input  bce_cfg_t     bce_cfg,
  input  logic         ace_cfg_we,
  input  logic [3:0]   ace_cfg_addr,
  input  logic [63:0]  ace_cfg_data,
  input  ace_instr_t   ace_instr,
  input  logic [255:0] puf_key,
  input  logic [63:0]  kdf_salt,
  input  logic [63:0]  kdf_context,
  // inbound stream from the interface router
  input  logic         ib_valid,
  output logic         ib_ready,
  input  logic [63:0]  ib_data,
  // outbound stream to the interface router
  output logic         ob_valid,
  input  logic         ob_ready_in,
  output logic [63:0]  ob_data,
  // host side of the output register
  input  logic         host_in_valid,
  output logic         host_in_ready,
  input  logic [63:0]  host_in_data,
  output logic         host_out_valid,
  input  logic         host_out_ready,
  output logic [63:0]  host_out_data
);
  // ---------------- inbound FIFO and LDPC decoder ----------------
  logic          cwf_valid, cwf_ready, ldpc_ready, ldpc_done, ldpc_ok;
  logic [1023:0] cwf_data;
  logic [895:0]  ldpc_data;
  logic [5:0]    ldpc_iters;

  iface_fifo #(.W_IN(64), .W_OUT(1024), .DEPTH_BITS(2048)) u_ibf (
    .clk, .rst_n, .flush(1'b0), .in_valid(ib_valid), .in_ready(ib_ready), .in_data(ib_data),
    .out_valid(cwf_valid), .out_ready(cwf_ready), .out_data(cwf_data), .count());
  assign cwf_ready = ctrl.ldpc_take && ldpc_ready;

  ldpc_decoder #(.Z(64), .NB(16), .MAX_ITER(32)) u_ldpc (
    .clk, .rst_n, .cw_valid(cwf_valid && ctrl.ldpc_take), .cw_ready(ldpc_ready), .cw(cwf_data),
    .done(ldpc_done), .ok(ldpc_ok), .data(ldpc_data), .iters(ldpc_iters));

  // ---------------- register files ----------------
  logic [511:0] drf_wdata, drf_rdata, crf_wdata, crf_rdata, rt_q, key_stage;
  logic [511:0] bce_rdata, ace_rdata, out_rdata;
  logic [3:0]   rt_we;

  always_comb begin
    case (ctrl.drf_wsel)
      2'd0:    drf_wdata = ldpc_data[511:0];
      2'd1:    drf_wdata = {128'b0, ldpc_data[895:512]};
      default: drf_wdata = crf_rdata;
    endcase
    case (ctrl.crf_wsel)
      2'd0:    crf_wdata = rt_q;
      2'd1:    crf_wdata = drf_rdata;
      default: crf_wdata = key_stage;
    endcase
  end

  regfile #(.BYTES(1024), .W(512)) u_drf (
    .clk, .we(ctrl.drf_we), .waddr(ctrl.drf_waddr), .wdata(drf_wdata), .raddr(ctrl.drf_raddr), .rdata(drf_rdata));
  regfile #(.BYTES(1024), .W(512)) u_crf (
    .clk, .we(ctrl.crf_we || rt_we[RT_CRF]), .waddr(ctrl.crf_waddr), .wdata(crf_wdata),
    .raddr(ctrl.crf_raddr), .rdata(crf_rdata));

  // ---------------- key generation engine ----------------
  logic        kv, kge_done, kge_busy;
  logic [31:0] kw0, kw1;
  logic [2:0]  kidx;
  kge #(.KEY_BLOCKS(2)) u_kge (
    .clk, .rst_n, .puf_key, .salt(kdf_salt), .context_w(kdf_context), .start(ctrl.kge_start),
    .nblk(2'd2), .busy(kge_busy), .kv, .kw0, .kw1, .kidx, .done(kge_done));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) key_stage <= '0;
    else if (kv) key_stage[511 - 64*kidx -: 64] <= {kw0, kw1};
  end

  // ---------------- router ----------------
  crypto_router #(.W(512)) u_rt (
    .go(ctrl.rt_go), .src(ctrl.rt_src), .dst(ctrl.rt_dst),
    .d_crf(crf_rdata), .d_bce(bce_rdata), .d_ace(ace_rdata), .d_out(out_rdata),
    .q(rt_q), .q_we(rt_we));

  // ---------------- BCE array ----------------
  logic bce_op_ready, bce_op_done;
  bce_array #(.N_BCE(N_BCE), .BUF_BYTES(256), .BUS_W(512)) u_bcea (
    .clk, .rst_n,
    .wr_en(rt_we[RT_BCE] && !ctrl.bce_key), .wr_row(ctrl.bce_row), .wr_data(rt_q),
    .rd_row(ctrl.bce_row), .rd_data(bce_rdata),
    .key_we(rt_we[RT_BCE] && ctrl.bce_key), .key_data(rt_q[32*N_BCE-1:0]),
    .cfg(bce_cfg), .op_valid(ctrl.bce_op_valid), .op_ready(bce_op_ready), .op(ctrl.bce_op),
    .op_done(bce_op_done));

  // ---------------- ACE ----------------
  logic ace_done, ace_instr_ready;
  ace #(.N_HALU(N_HALU), .N_ACALU(2), .QW(32)) u_ace (
    .clk, .rst_n, .instr_valid(ctrl.ace_valid), .instr_ready(ace_instr_ready), .instr(ace_instr),
    .done(ace_done),
    .wr_en(rt_we[RT_ACE] || ctrl.ace_wr_out), .wr_row(ctrl.ace_row),
    .wr_data(ctrl.ace_wr_out ? out_rdata : rt_q),
    .rd_row(ctrl.ace_row), .rd_data(ace_rdata),
    .cfg_we(ace_cfg_we), .cfg_addr(ace_cfg_addr), .cfg_data(ace_cfg_data));

  // ---------------- output register ----------------
  logic [3:0] hi_rows;
  logic       ho_busy, hi_ready;
  assign host_in_ready = hi_ready && ctrl.hi_open;
  output_register #(.BYTES(512), .HOST_W(64)) u_out (
    .clk, .rst_n,
    .eng_we(rt_we[RT_OUT] || ctrl.out_we_ace), .eng_row(ctrl.out_row),
    .eng_wdata(ctrl.out_we_ace ? ace_rdata : rt_q),
    .eng_rrow(ctrl.out_row), .eng_rdata(out_rdata),
    .host_in_valid(host_in_valid && ctrl.hi_open), .host_in_ready(hi_ready), .host_in_data, .hi_clear(ctrl.hi_clear), .hi_rows,
    .ho_start(ctrl.ho_start), .ho_row(ctrl.ho_row), .ho_nrows(ctrl.ho_nrows),
    .host_out_valid, .host_out_ready, .host_out_data, .ho_busy);

  // ---------------- outbound FIFO ----------------
  logic       obf_in_ready;
  logic [5:0] obf_count;
  iface_fifo #(.W_IN(512), .W_OUT(64), .DEPTH_BITS(2048)) u_obf (
    .clk, .rst_n, .flush(1'b0), .in_valid(ctrl.ob_push), .in_ready(obf_in_ready), .in_data(drf_rdata),
    .out_valid(ob_valid), .out_ready(ob_ready_in), .out_data(ob_data), .count(obf_count));

  assign stat.ldpc_done    = ldpc_done;
  assign stat.ldpc_ok      = ldpc_ok;
  assign stat.bce_op_ready = bce_op_ready;
  assign stat.bce_op_done  = bce_op_done;
  assign stat.ace_done     = ace_done;
  assign stat.kge_done     = kge_done;
  assign stat.ob_ready     = obf_in_ready;
  assign stat.ob_empty     = (obf_count == '0);
  assign stat.hi_rows      = hi_rows;
  assign stat.ho_busy      = ho_busy;

  // Checkers are enabled from the first clock after reset release, so the
  // asynchronous reset net itself is not used as synchronous logic.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end
  assert property (@(posedge clk) disable iff (!chk_en) ctrl.ob_push |-> obf_in_ready)
    else $error("crypto_engine: outbound FIFO overrun");
endmodule
