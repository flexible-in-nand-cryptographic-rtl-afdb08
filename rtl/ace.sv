// ace: asymmetric cipher engine (ACE).
//
// A 256-byte buffer (four 512-bit rows = 32 64-bit words) feeds two
// execution groups:
//  * the hash ALU cluster: N_HALU hash ALUs working on the eight 64-bit words
//    of two rows in SIMD fashion (word i of row A and row B into HALU i), with
//    its padding unit, which pads a final message block held in a row;
//  * the asymmetric cipher ALU pair: two ACALUs, each reading two words and
//    writing one. Its padding unit zero-extends operands narrower than 64
//    bits (instr.opw) before they enter the 64-bit datapath. Each ACALU keeps
//    its limb carry between instructions.
// One instruction is accepted when instr_valid and instr_ready; its results
// are written at the next clock edge and done pulses one cycle later. Rows are
// loaded and read through wr_*/rd_* (512 bits, router and output register
// side). cfg_* sets the modulus registers (0: q, 1: Barrett mu, 2: hash-add
// modulus) and the shared permutation settings (3..8: 64-bit words).
// The unit counts (8 HALUs, 2 ACALUs, 256-byte buffer) are the paper's; the
// instruction format and sequencing are this design's.
// Lint note: the modulus register is 64 bits wide for configuration, but the
// ACALUs take its low QW bits, so the upper bits are unread at QW=32.
module ace
  import fv_pkg::*;
#(
  parameter int unsigned N_HALU  = 8,
  parameter int unsigned N_ACALU = 2,
  parameter int unsigned QW      = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         instr_valid,
  output logic         instr_ready,
  input  ace_instr_t   instr,
  output logic         done,
  input  logic         wr_en,
  input  logic [1:0]   wr_row,
  input  logic [511:0] wr_data,
  input  logic [1:0]   rd_row,
  output logic [511:0] rd_data,
  input  logic         cfg_we,
  input  logic [3:0]   cfg_addr,
  input  logic [63:0]  cfg_data
);
  logic [63:0]  buf_q [32];
  logic [63:0]  q_r, mu_r, hmod_r;
  logic [383:0] perm_r;
  logic [N_ACALU-1:0] carry_q;

  assign instr_ready = 1'b1;

  function automatic logic [511:0] row(input logic [63:0] b [32], input logic [1:0] r);
    for (int w = 0; w < 8; w++) row[64*w +: 64] = b[int'(r)*8 + w];
  endfunction

  // ---------------- hash ALU cluster ----------------
  logic [511:0] ra, rb, hres;
  assign ra = row(buf_q, instr.row_a);
  assign rb = row(buf_q, instr.row_b);
  for (genvar h = 0; h < N_HALU; h++) begin : g_halu
    hash_alu u_halu (
      .in0(ra[64*(h%8) +: 64]), .in1(rb[64*(h%8) +: 64]), .ctrl(instr.hctrl),
      .perm_cfg(perm_r[351:0]), .modulus(hmod_r), .out(hres[64*(h%8) +: 64]));
  end

  logic [511:0] pad0, pad1;
  logic         pad_two;
  hash_pad u_hpad (
    .blk_in(ra), .nbytes(instr.pad_nbytes), .msg_bits(buf_q[instr.wb0]),
    .blk0(pad0), .blk1(pad1), .two(pad_two));

  // ---------------- asymmetric cipher ALU pair ----------------
  logic [4:0]  wa [N_ACALU], wb [N_ACALU], wd [N_ACALU];
  logic [63:0] ares [N_ACALU];
  logic        acout [N_ACALU];
  logic [63:0] opmask;
  assign wa[0] = instr.wa0; assign wb[0] = instr.wb0; assign wd[0] = instr.wd0;
  assign wa[1] = instr.wa1; assign wb[1] = instr.wb1; assign wd[1] = instr.wd1;
  // ALU-side padding unit: zero-extend operands narrower than 64 bits
  assign opmask = (instr.opw == 7'd0 || instr.opw >= 7'd64) ? '1 : ~(64'hffff_ffff_ffff_ffff << instr.opw);

  for (genvar a = 0; a < N_ACALU; a++) begin : g_acalu
    acalu #(.QW(QW)) u_acalu (
      .in0(buf_q[wa[a%2]] & opmask), .in1(buf_q[wb[a%2]] & opmask), .cin(carry_q[a]),
      .ctrl(instr.actrl), .q(q_r[QW-1:0]), .mu(mu_r[2*QW-1:0]), .perm_cfg(perm_r[351:0]),
      .out(ares[a]), .cout(acout[a]));
  end

  logic fire;
  assign fire = instr_valid && instr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_r     <= 64'd3329;
      mu_r    <= '0;
      hmod_r  <= '1;
      perm_r  <= '0;
      carry_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= fire;
      if (cfg_we) begin
        case (cfg_addr)
          4'd0: q_r    <= cfg_data;
          4'd1: mu_r   <= cfg_data;
          4'd2: hmod_r <= cfg_data;
          default:
            if (cfg_addr >= 4'd3 && cfg_addr <= 4'd8) perm_r[64*(int'(cfg_addr) - 3) +: 64] <= cfg_data;
        endcase
      end
      if (fire && instr.unit == ACE_ALU)
        for (int a = 0; a < N_ACALU; a++)
          if (instr.actrl.op == AC_ADD || instr.actrl.op == AC_SUB) carry_q[a] <= acout[a];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int w = 0; w < 8; w++) buf_q[int'(wr_row)*8 + w] <= wr_data[64*w +: 64];
    if (fire) begin
      case (instr.unit)
        ACE_HASH:
          for (int w = 0; w < 8; w++) buf_q[int'(instr.row_d)*8 + w] <= hres[64*w +: 64];
        ACE_ALU:
          for (int a = 0; a < N_ACALU; a++) buf_q[wd[a]] <= ares[a];
        ACE_PAD: begin
          for (int w = 0; w < 8; w++) buf_q[int'(instr.row_d)*8 + w] <= pad0[64*w +: 64];
          if (pad_two)
            for (int w = 0; w < 8; w++) buf_q[int'(2'(instr.row_d + 2'd1))*8 + w] <= pad1[64*w +: 64];
        end
        default: ;
      endcase
    end
  end

  assign rd_data = row(buf_q, rd_row);

  // Checkers are enabled from the first clock after reset release, so the
  // asynchronous reset net itself is not used as synchronous logic.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end
  assert property (@(posedge clk) disable iff (!chk_en) !(wr_en && fire))
    else $error("ace: row write together with an instruction");
endmodule
