// control_unit: the FlashVault control FSM.
//
// Takes one command at a time from the SSD controller (cmd_valid/cmd_ready,
// a cmd_t) and sequences the buffer unit, the interface unit and one of the
// cryptographic engines through it, raising cmd_done for one cycle at the
// end (cmd_err with it if an LDPC codeword could not be corrected).
//
//  READ     sense the page into the page buffer (counting arr_in words), copy
//           it to the cache buffer, then per 1024-bit codeword: stream it
//           through the router into the engine's FIFO, LDPC-decode it, put the
//           896 data bits into Data RF rows 0-1, move them to Cache RF rows
//           0-1, route them into the BCE buffer, run the n_uop BCE
//           micro-operations (decryption), route the result into the output
//           register and let the host drain it (two 512-bit rows).
//  PROGRAM  per 256-byte chunk: wait for the host to fill output register
//           rows 0-3, route them into the BCE buffer, run the micro-operations
//           (encryption), route the rows into Cache RF 0-3, copy them into
//           Data RF 0-3 and push them through the outbound FIFO and router
//           into the plane's cache buffer. After the last chunk copy the
//           cache buffer into the page buffer and stream it to the array.
//           Cache read: with next_sense the FSM starts sensing the next page
//           into the page buffer right after the page-to-cache copy, so the
//           array works while the cache buffer feeds the engine; a later READ
//           with presensed skips its own sense request and only waits for
//           that page. A per-plane tracker counts the sensed words
//           independently of the FSM state.
//  KEYGEN   run the KGE, write the 512-bit key into Cache RF row 15 and from
//           there through the router into the BCE key register.
//  KEY_ACE  move the key in Cache RF row 15 through the router into ACE
//           buffer row ace_row (the asymmetric side of key delivery).
//  ACE_LD   wait for one host row in the output register and load it into
//           ACE buffer row ace_row.
//  ACE_EX   issue the command's ACE instruction and wait for it.
//  ACE_ST   copy ACE row ace_row into output register row `row` and let the
//           host read it.
//
// The BCE micro-program (up to N_UOP bce_op_t words) is written through
// uop_we/uop_addr/uop_data and shared by both engines. Host words are
// accepted into an output register only while a state waits for them
// (hi_open), so a fast host cannot overwrite rows still in use. Register-file reads
// take one cycle, so every row copy out of a register file spends two
// cycles per row (address, then write). The paper describes the control unit
// only as the block that orchestrates the read/program dataflows and the
// engines; the command set, the micro-program memory and all state sequences
// are this design's. One command is in flight at a time.
module control_unit
  import fv_pkg::*;
#(
  parameter int unsigned N_PLANE    = 4,
  parameter int unsigned N_ENG      = 2,
  parameter int unsigned PAGE_BYTES = 4096,
  parameter int unsigned N_UOP      = 16,
  localparam int unsigned NW   = PAGE_BYTES / 2,      // 16-bit array words per page
  localparam int unsigned NCW  = PAGE_BYTES / 128,    // 1024-bit codewords per page
  localparam int unsigned NCH  = PAGE_BYTES / 256,    // 256-byte BCE chunks per page
  localparam int unsigned NIO  = PAGE_BYTES / 8,      // 64-bit words per page
  localparam int unsigned IW   = $clog2(NIO + 1),
  localparam int unsigned CNTW = $clog2(NW + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // commands from the SSD controller
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic               cmd_done,
  output logic               cmd_err,
  output cmd_t               cur_cmd,      // command being executed
  // BCE micro-program memory
  input  logic               uop_we,
  input  logic [$clog2(N_UOP)-1:0] uop_addr,
  input  bce_op_t            uop_data,
  // engines
  output eng_ctrl_t          eng_ctrl [N_ENG],
  input  eng_stat_t          eng_stat [N_ENG],
  // planes
  output logic [N_PLANE-1:0] arr_rst,
  output logic [N_PLANE-1:0] sense_req,
  output logic [N_PLANE-1:0] prog_req,
  input  logic [N_PLANE-1:0] arr_in_valid,
  input  logic [N_PLANE-1:0] arr_out_fire,
  output logic [N_PLANE-1:0] cp_p2c,
  output logic [N_PLANE-1:0] cp_c2p,
  input  logic [N_PLANE-1:0] pl_busy,
  output logic [N_PLANE-1:0] io_rd_start,
  output logic [N_PLANE-1:0] io_wr_start,
  output logic [IW-1:0]      io_base,
  output logic [IW-1:0]      io_len
);
  typedef enum logic [5:0] {
    S_IDLE,
    S_R_SENSE, S_R_SWAIT, S_R_P2C, S_R_P2CW, S_R_CW, S_R_LDPC, S_R_DRF, S_R_D2C, S_R_C2B,
    S_R_B2O, S_R_HO, S_R_HOW,
    S_P_IOW, S_P_HCLR, S_P_HIN, S_P_O2B, S_P_B2C, S_P_C2D, S_P_D2F, S_P_DRAIN, S_P_C2P,
    S_P_C2PW, S_P_PREQ, S_P_PW,
    S_OP, S_OPW,
    S_R_NEXT, S_K_START, S_K_WAIT, S_K_CRF, S_K_KEY, S_K_ACE,
    S_A_CLR, S_A_LD, S_A_EX, S_A_EXW, S_A_ST, S_A_HO, S_A_HOW,
    S_DONE
  } st_e;

  st_e         st, op_ret;
  cmd_t        c;
  logic [CNTW-1:0] cnt;
  logic        ph;
  logic [$clog2(NCW+1)-1:0] cw;     // codeword (read) or chunk (program) index
  logic [$clog2(N_UOP+1)-1:0] u, n_uop;
  logic        err;
  logic [N_PLANE-1:0] sensing, sensed;  // sense tracker state, see below
  logic [CNTW-1:0]    scnt [N_PLANE];
  bce_op_t     uop_mem [N_UOP];
  eng_ctrl_t   ec;
  eng_stat_t   es;

  assign cur_cmd = c;
  assign es      = eng_stat[c.eng];
  assign n_uop   = (c.n_uop == '0) ? ($clog2(N_UOP+1))'(N_UOP) : ($clog2(N_UOP+1))'(c.n_uop);

  always_ff @(posedge clk) begin
    if (uop_we) uop_mem[uop_addr] <= uop_data;
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; op_ret <= S_IDLE; c <= '0; cnt <= '0; ph <= 1'b0; cw <= '0; u <= '0;
      err <= 1'b0;
    end else begin
      case (st)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; cnt <= '0; ph <= 1'b0; cw <= '0; u <= '0; err <= 1'b0;
          case (cmd.op)
            CMD_READ:    st <= S_R_SENSE;
            CMD_PROGRAM: st <= S_P_IOW;
            CMD_KEYGEN:  st <= S_K_START;
            CMD_ACE_LD:  st <= S_A_CLR;
            CMD_ACE_EX:  st <= S_A_EX;
            CMD_ACE_ST:  st <= S_A_ST;
            CMD_KEY_ACE: st <= S_K_ACE;
            default:     st <= S_DONE;
          endcase
        end
        // ---------- read ----------
        S_R_SENSE: st <= S_R_SWAIT;
        S_R_SWAIT: if (sensed[c.plane]) st <= S_R_P2C;
        S_R_P2C:  st <= S_R_P2CW;
        S_R_P2CW: if (!pl_busy[c.plane]) st <= c.next_sense ? S_R_NEXT : S_R_CW;
        S_R_NEXT: st <= S_R_CW;
        S_R_CW:   st <= S_R_LDPC;
        S_R_LDPC: if (es.ldpc_done) begin
          if (!es.ldpc_ok) err <= 1'b1;
          st <= S_R_DRF; cnt <= '0;
        end
        S_R_DRF: begin
          cnt <= cnt + 1'b1;
          if (cnt == 1) begin cnt <= '0; ph <= 1'b0; st <= S_R_D2C; end
        end
        S_R_D2C, S_R_C2B: begin
          ph <= !ph;
          if (ph) begin
            cnt <= cnt + 1'b1;
            if (cnt == 1) begin
              cnt <= '0;
              if (st == S_R_D2C) st <= S_R_C2B;
              else begin st <= S_OP; op_ret <= S_R_B2O; u <= '0; end
            end
          end
        end
        S_R_B2O: begin
          cnt <= cnt + 1'b1;
          if (cnt == 1) begin cnt <= '0; st <= S_R_HO; end
        end
        S_R_HO:  st <= S_R_HOW;
        S_R_HOW: if (!es.ho_busy) begin
          cw <= cw + 1'b1;
          st <= (cw == ($clog2(NCW+1))'(NCW - 1)) ? S_DONE : S_R_CW;
        end
        // ---------- program ----------
        S_P_IOW:  st <= S_P_HCLR;
        S_P_HCLR: st <= S_P_HIN;
        S_P_HIN:  if (es.hi_rows == 4'd4) begin cnt <= '0; st <= S_P_O2B; end
        S_P_O2B: begin
          cnt <= cnt + 1'b1;
          if (cnt == 3) begin cnt <= '0; st <= S_OP; op_ret <= S_P_B2C; u <= '0; end
        end
        S_P_B2C: begin
          cnt <= cnt + 1'b1;
          if (cnt == 3) begin cnt <= '0; ph <= 1'b0; st <= S_P_C2D; end
        end
        S_P_C2D: begin
          ph <= !ph;
          if (ph) begin
            cnt <= cnt + 1'b1;
            if (cnt == 3) begin cnt <= '0; st <= S_P_D2F; end
          end
        end
        S_P_D2F: begin
          if (!ph) ph <= 1'b1;
          else if (es.ob_ready) begin
            ph <= 1'b0;
            cnt <= cnt + 1'b1;
            if (cnt == 3) begin
              cnt <= '0;
              cw <= cw + 1'b1;
              st <= (cw == ($clog2(NCW+1))'(NCH - 1)) ? S_P_DRAIN : S_P_HCLR;
            end
          end
        end
        S_P_DRAIN: if (es.ob_empty) st <= S_P_C2P;
        S_P_C2P:   st <= S_P_C2PW;
        S_P_C2PW:  if (!pl_busy[c.plane]) begin cnt <= '0; st <= S_P_PREQ; end
        S_P_PREQ:  st <= S_P_PW;
        S_P_PW: if (arr_out_fire[c.plane]) begin
          cnt <= cnt + 1'b1;
          if (cnt == CNTW'(NW - 1)) begin cnt <= '0; st <= S_DONE; end
        end
        // ---------- BCE micro-program ----------
        S_OP:  if (es.bce_op_ready) st <= S_OPW;
        S_OPW: if (es.bce_op_done) begin
          u <= u + 1'b1;
          st <= (u + 1'b1 == n_uop) ? op_ret : S_OP;
        end
        // ---------- key generation ----------
        S_K_START: st <= S_K_WAIT;
        S_K_WAIT:  if (es.kge_done) st <= S_K_CRF;
        S_K_CRF:   begin st <= S_K_KEY; ph <= 1'b0; end
        S_K_KEY:   begin ph <= 1'b1; if (ph) st <= S_DONE; end
        S_K_ACE:   begin ph <= 1'b1; if (ph) st <= S_DONE; end
        // ---------- ACE ----------
        S_A_CLR: st <= S_A_LD;
        S_A_LD:  if (es.hi_rows != '0) st <= S_DONE;
        S_A_EX:  st <= S_A_EXW;
        S_A_EXW: if (es.ace_done) st <= S_DONE;
        S_A_ST:  st <= S_A_HO;
        S_A_HO:  st <= S_A_HOW;
        S_A_HOW: if (!es.ho_busy) st <= S_DONE;
        S_DONE:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- per-plane sense tracker ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sensing <= '0; sensed <= '0;
      for (int p = 0; p < N_PLANE; p++) scnt[p] <= '0;
    end else begin
      for (int p = 0; p < N_PLANE; p++) begin
        if (sense_req[p]) begin
          sensing[p] <= 1'b1; sensed[p] <= 1'b0; scnt[p] <= '0;
        end else if (sensing[p] && arr_in_valid[p]) begin
          scnt[p] <= scnt[p] + 1'b1;
          if (scnt[p] == CNTW'(NW - 1)) begin sensing[p] <= 1'b0; sensed[p] <= 1'b1; end
        end
        if (cp_p2c[p]) sensed[p] <= 1'b0;
      end
    end
  end

  assign cmd_ready = (st == S_IDLE);
  assign cmd_done  = (st == S_DONE);
  assign cmd_err   = (st == S_DONE) && err;

  // ---------------- outputs ----------------
  always_comb begin
    ec = '0;
    arr_rst = '0; sense_req = '0; prog_req = '0; cp_p2c = '0; cp_c2p = '0;
    io_rd_start = '0; io_wr_start = '0; io_base = '0; io_len = '0;
    ec.bce_op = uop_mem[u[$clog2(N_UOP)-1:0]];
    case (st)
      S_R_SENSE, S_R_NEXT:
        if (st == S_R_NEXT || !c.presensed) begin arr_rst[c.plane] = 1'b1; sense_req[c.plane] = 1'b1; end
      S_R_P2C:   cp_p2c[c.plane] = 1'b1;
      S_R_CW: begin
        io_rd_start[c.plane] = 1'b1;
        io_base = IW'(cw) * IW'(16);
        io_len  = IW'(16);
      end
      S_R_LDPC: ec.ldpc_take = 1'b1;
      S_R_DRF: begin
        ec.drf_we = 1'b1; ec.drf_waddr = 4'(cnt); ec.drf_wsel = 2'(cnt);
      end
      S_R_D2C: begin
        ec.drf_raddr = 4'(cnt);
        ec.crf_we = ph; ec.crf_waddr = 4'(cnt); ec.crf_wsel = 2'd1;
      end
      S_R_C2B: begin
        ec.crf_raddr = 4'(cnt);
        ec.rt_go = ph; ec.rt_src = RT_CRF; ec.rt_dst = RT_BCE; ec.bce_row = 2'(cnt);
      end
      S_R_B2O: begin
        ec.rt_go = 1'b1; ec.rt_src = RT_BCE; ec.rt_dst = RT_OUT;
        ec.bce_row = 2'(cnt); ec.out_row = 3'(cnt);
      end
      S_R_HO: begin ec.ho_start = 1'b1; ec.ho_row = 3'd0; ec.ho_nrows = 4'd2; end
      S_P_IOW: begin io_wr_start[c.plane] = 1'b1; io_base = '0; end
      S_P_HCLR: ec.hi_clear = 1'b1;
      S_P_O2B: begin
        ec.rt_go = 1'b1; ec.rt_src = RT_OUT; ec.rt_dst = RT_BCE;
        ec.out_row = 3'(cnt); ec.bce_row = 2'(cnt);
      end
      S_P_B2C: begin
        ec.rt_go = 1'b1; ec.rt_src = RT_BCE; ec.rt_dst = RT_CRF;
        ec.bce_row = 2'(cnt); ec.crf_waddr = 4'(cnt); ec.crf_wsel = 2'd0;
      end
      S_P_C2D: begin
        ec.crf_raddr = 4'(cnt);
        ec.drf_we = ph; ec.drf_waddr = 4'(cnt); ec.drf_wsel = 2'd2;
      end
      S_P_D2F: begin
        ec.drf_raddr = 4'(cnt);
        ec.ob_push = ph && es.ob_ready;
      end
      S_P_C2P:  cp_c2p[c.plane] = 1'b1;
      S_P_PREQ: begin arr_rst[c.plane] = 1'b1; prog_req[c.plane] = 1'b1; end
      S_OP:     ec.bce_op_valid = 1'b1;
      S_K_START: ec.kge_start = 1'b1;
      S_K_CRF: begin ec.crf_we = 1'b1; ec.crf_waddr = 4'd15; ec.crf_wsel = 2'd2; end
      S_K_KEY: begin
        ec.crf_raddr = 4'd15;
        ec.rt_go = ph; ec.rt_src = RT_CRF; ec.rt_dst = RT_BCE; ec.bce_key = 1'b1;
      end
      S_P_HIN: ec.hi_open = (es.hi_rows < 4'd4);
      S_K_ACE: begin
        ec.crf_raddr = 4'd15;
        ec.rt_go = ph; ec.rt_src = RT_CRF; ec.rt_dst = RT_ACE; ec.ace_row = c.ace_row;
      end
      S_A_CLR: ec.hi_clear = 1'b1;
      S_A_LD: begin
        ec.out_row = 3'd0; ec.ace_row = c.ace_row; ec.ace_wr_out = (es.hi_rows != '0);
        ec.hi_open = (es.hi_rows == '0);
      end
      S_A_EX: ec.ace_valid = 1'b1;
      S_A_ST: begin ec.out_we_ace = 1'b1; ec.out_row = c.row; ec.ace_row = c.ace_row; end
      S_A_HO: begin ec.ho_start = 1'b1; ec.ho_row = c.row; ec.ho_nrows = 4'd1; end
      default: ;
    endcase
  end

  always_comb begin
    for (int e = 0; e < N_ENG; e++) eng_ctrl[e] = (e == int'(c.eng) && st != S_IDLE) ? ec : '0;
  end

  // Checkers are enabled from the first clock after reset release, so the
  // asynchronous reset net itself is not used as synchronous logic.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end
  assert property (@(posedge clk) disable iff (!chk_en) cmd_valid && cmd_ready |-> int'(cmd.eng) < N_ENG)
    else $error("control_unit: engine index out of range");
  assert property (@(posedge clk) disable iff (!chk_en)
                   st == S_R_SENSE && c.presensed |-> sensing[c.plane] || sensed[c.plane])
    else $error("control_unit: READ with presensed but no sense under way");
endmodule
