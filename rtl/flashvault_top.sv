// flashvault_top: a FlashVault NAND die - per-plane buffers, the interface
// unit, two cryptographic engines and the control unit.
//
// N_PLANE plane_buffer instances (page + cache buffer each) sit between the
// memory array and the interface unit. The interface unit's router
// (iface_router) arbitrates the planes' 64-bit cache-buffer streams towards
// the engine of the current command and steers the engine's outbound 64-bit
// stream into one plane's cache buffer. Each crypto_engine holds its own
// FIFOs, LDPC decoder, KGE, register files, router, BCE array, ACE and output
// register. The control_unit runs one command at a time over these.
//
// Parts outside the logic are ports: the memory array cells (sense_req /
// prog_req start a page transfer; the array then streams 16-bit words on
// arr_in_* or takes them from arr_out_*), the PUF that supplies the 256-bit
// root key (puf_key, held constant), and the SSD controller (cmd_*, host_*,
// configuration writes). Host data goes to and from the output register of
// the engine named by the current command. The BCE micro-program, the PU/TU
// tables (bce_cfg) and the ACE constants (ace_cfg_*) are written by the SSD
// controller and broadcast to both engines.
//
// Block set, plane and engine counts, buffer sizes and link widths follow the
// architecture figure and the evaluation configuration (4 planes, 2 engines,
// 4 KB pages). The command protocol and array-side handshake are this
// design's.
//
// Lint notes: the router's one-hot grant is left unread (the granted stream
// already arrives muxed), and only the fields of cur_cmd that steer the host
// and FIFO streams are read here; the unread fields are consumed inside the
// control unit.
module flashvault_top
  import fv_pkg::*;
#(
  parameter int unsigned N_PLANE    = 4,
  parameter int unsigned N_ENG      = 2,
  parameter int unsigned PAGE_BYTES = 4096,
  parameter int unsigned N_UOP      = 16,
  parameter int unsigned N_BCE      = 16,
  parameter int unsigned N_HALU     = 8,
  localparam int unsigned PB   = (N_PLANE > 1) ? $clog2(N_PLANE) : 1,
  localparam int unsigned NIO  = PAGE_BYTES / 8,
  localparam int unsigned IW   = $clog2(NIO + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // SSD controller: commands
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic               cmd_done,
  output logic               cmd_err,
  // SSD controller: configuration
  input  logic               uop_we,
  input  logic [$clog2(N_UOP)-1:0] uop_addr,
  input  bce_op_t            uop_data,
  input  bce_cfg_t           bce_cfg,
  input  logic               ace_cfg_we,
  input  logic [3:0]         ace_cfg_addr,
  input  logic [63:0]        ace_cfg_data,
  // SSD controller: host data
  input  logic               host_in_valid,
  output logic               host_in_ready,
  input  logic [63:0]        host_in_data,
  output logic               host_out_valid,
  input  logic               host_out_ready,
  output logic [63:0]        host_out_data,
  // PUF root key
  input  logic [255:0]       puf_key,
  // memory array, per plane
  output logic [N_PLANE-1:0] sense_req,
  output logic [N_PLANE-1:0] prog_req,
  input  logic [N_PLANE-1:0] arr_in_valid,
  input  logic [15:0]        arr_in_data  [N_PLANE],
  output logic [N_PLANE-1:0] arr_out_valid,
  input  logic [N_PLANE-1:0] arr_out_ready,
  output logic [15:0]        arr_out_data [N_PLANE]
);
  cmd_t       cur;
  eng_ctrl_t  ectrl [N_ENG];
  eng_stat_t  estat [N_ENG];

  logic [N_PLANE-1:0] arr_rst, cp_p2c, cp_c2p, pl_busy, io_rd_start, io_wr_start;
  logic [N_PLANE-1:0] io_out_valid, io_out_last, io_out_ready, io_in_valid, io_in_ready;
  logic [63:0]        io_out_data [N_PLANE];
  logic [63:0]        po_data;
  logic [IW-1:0]      io_base, io_len;

  control_unit #(.N_PLANE(N_PLANE), .N_ENG(N_ENG), .PAGE_BYTES(PAGE_BYTES), .N_UOP(N_UOP)) u_cu (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done, .cmd_err, .cur_cmd(cur),
    .uop_we, .uop_addr, .uop_data, .eng_ctrl(ectrl), .eng_stat(estat),
    .arr_rst, .sense_req, .prog_req, .arr_in_valid, .arr_out_fire(arr_out_valid & arr_out_ready),
    .cp_p2c, .cp_c2p, .pl_busy, .io_rd_start, .io_wr_start, .io_base, .io_len);

  // ---------------- buffer unit ----------------
  for (genvar p = 0; p < N_PLANE; p++) begin : g_plane
    plane_buffer #(.PAGE_BYTES(PAGE_BYTES), .IO_W(64)) u_pb (
      .clk, .rst_n, .arr_rst(arr_rst[p]),
      .arr_in_valid(arr_in_valid[p]), .arr_in_data(arr_in_data[p]),
      .arr_out_valid(arr_out_valid[p]), .arr_out_ready(arr_out_ready[p]), .arr_out_data(arr_out_data[p]),
      .cp_p2c(cp_p2c[p]), .cp_c2p(cp_c2p[p]), .busy(pl_busy[p]),
      .io_rd_start(io_rd_start[p]), .io_wr_start(io_wr_start[p]), .io_base, .io_len,
      .io_out_valid(io_out_valid[p]), .io_out_last(io_out_last[p]), .io_out_data(io_out_data[p]),
      .io_out_ready(io_out_ready[p]),
      .io_in_valid(io_in_valid[p]), .io_in_data(po_data), .io_in_ready(io_in_ready[p]));
  end

  // ---------------- interface unit router ----------------
  logic          rin_valid, rin_ready, rob_valid, rob_ready;
  logic [63:0]   rin_data, rob_data;
  logic [PB-1:0] grant;

  iface_router #(.N_PLANE(N_PLANE), .W(64)) u_ir (
    .clk, .rst_n,
    .pl_valid(io_out_valid), .pl_last(io_out_last), .pl_data(io_out_data), .pl_ready(io_out_ready),
    .out_valid(rin_valid), .out_data(rin_data), .out_ready(rin_ready), .grant_plane(grant),
    .ob_valid(rob_valid), .ob_data(rob_data), .ob_plane(PB'(cur.plane)), .ob_ready(rob_ready),
    .po_valid(io_in_valid), .po_data, .po_ready(io_in_ready));

  // ---------------- cryptographic unit ----------------
  logic [N_ENG-1:0] ib_ready, ob_valid, hin_ready, hout_valid;
  logic [63:0]      ob_data [N_ENG];
  logic [63:0]      hout_data [N_ENG];

  for (genvar e = 0; e < N_ENG; e++) begin : g_eng
    logic sel;
    assign sel = (int'(cur.eng) == e);
    crypto_engine #(.N_BCE(N_BCE), .N_HALU(N_HALU)) u_eng (
      .clk, .rst_n, .ctrl(ectrl[e]), .stat(estat[e]),
      .bce_cfg, .ace_cfg_we, .ace_cfg_addr, .ace_cfg_data, .ace_instr(cur.instr),
      .puf_key, .kdf_salt(cur.salt), .kdf_context(cur.context_w),
      .ib_valid(rin_valid && sel), .ib_ready(ib_ready[e]), .ib_data(rin_data),
      .ob_valid(ob_valid[e]), .ob_ready_in(rob_ready && sel), .ob_data(ob_data[e]),
      .host_in_valid(host_in_valid && sel), .host_in_ready(hin_ready[e]), .host_in_data,
      .host_out_valid(hout_valid[e]), .host_out_ready(host_out_ready && sel),
      .host_out_data(hout_data[e]));
  end

  assign rin_ready      = ib_ready[cur.eng];
  assign rob_valid      = ob_valid[cur.eng];
  assign rob_data       = ob_data[cur.eng];
  assign host_in_ready  = hin_ready[cur.eng];
  assign host_out_valid = hout_valid[cur.eng];
  assign host_out_data  = hout_data[cur.eng];
endmodule
