// bce_array: SIMD array of block cipher engines with its 256-byte buffer.
//
// N_BCE engines share one control word per operation (SIMD). The buffer holds
// BUF_BYTES/8 64-bit blocks, organised for the router as 512-bit rows. An
// operation (op_valid while op_ready) is applied to every block of the buffer
// in place: the lanes take blocks 0..N_BCE-1 in the first pass, the next
// N_BCE in the second, and so on. Input 0 of a lane is the low half of its
// block; Input 1 is the high half, or, with op.key_in1, the lane's 32-bit
// slice of the key register, so round keys can be mixed in. Because results
// overwrite the buffer, a cipher runs as a sequence of operations.
//
// Timing: with 32 blocks and 16 lanes, op_done pulses 4 cycles after the
// cycle in which the operation is accepted (one cycle per pass, registered
// BCE outputs, write-back overlapping the next pass); op_ready returns with it. Rows are written with wr_* (one 512-bit row per cycle) and read
// combinationally from rd_row. The 16 engines and 256-byte buffer are the
// paper's numbers; the in-place schedule and key register are this design's.
module bce_array
  import fv_pkg::*;
#(
  parameter int unsigned N_BCE     = 16,
  parameter int unsigned BUF_BYTES = 256,
  parameter int unsigned BUS_W     = 512,
  localparam int unsigned NW    = BUF_BYTES / 8,     // 64-bit blocks
  localparam int unsigned WPR   = BUS_W / 64,        // blocks per row
  localparam int unsigned NROW  = NW / WPR,
  localparam int unsigned NPASS = NW / N_BCE,
  localparam int unsigned RW    = (NROW > 1) ? $clog2(NROW) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // row access
  input  logic             wr_en,
  input  logic [RW-1:0]    wr_row,
  input  logic [BUS_W-1:0] wr_data,
  input  logic [RW-1:0]    rd_row,
  output logic [BUS_W-1:0] rd_data,
  // key register (32 bits per lane)
  input  logic             key_we,
  input  logic [32*N_BCE-1:0] key_data,
  // configuration broadcast to all BCEs
  input  bce_cfg_t         cfg,
  // operation
  input  logic             op_valid,
  output logic             op_ready,
  input  bce_op_t          op,
  output logic             op_done
);
  logic [63:0] buf_q [NW];
  logic [32*N_BCE-1:0] key_q;
  bce_op_t     op_q;
  logic        busy;
  logic [$clog2(NPASS+1)-1:0] pass;     // pass being issued
  logic        wb_en;                   // BCE outputs valid this cycle
  logic [$clog2(NPASS+1)-1:0] wb_pass;

  logic [63:0] lane_out [N_BCE];
  logic        lane_vld [N_BCE];

  assign op_ready = !busy;

  for (genvar l = 0; l < N_BCE; l++) begin : g_lane
    logic [63:0] blk;
    logic [31:0] i1;
    logic        issue;
    assign issue = busy && (int'(pass) < NPASS);
    assign blk = buf_q[(issue ? int'(pass) : 0) * N_BCE + l];
    assign i1  = op_q.key_in1 ? key_q[32*l +: 32] : blk[63:32];
    bce u_bce (
      .clk, .rst_n, .en(issue), .in0(blk[31:0]), .in1(i1), .ctrl(op_q.ctrl), .cfg,
      .out(lane_out[l]), .out_valid(lane_vld[l]));
  end

  assign wb_en = lane_vld[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      pass    <= '0;
      wb_pass <= '0;
      op_q    <= '0;
      op_done <= 1'b0;
      key_q   <= '0;
    end else begin
      op_done <= 1'b0;
      if (key_we) key_q <= key_data;
      if (!busy) begin
        if (op_valid) begin
          busy    <= 1'b1;
          op_q    <= op;
          pass    <= '0;
          wb_pass <= '0;
        end
      end else begin
        if (int'(pass) < NPASS) pass <= pass + 1'b1;
        if (wb_en) begin
          wb_pass <= wb_pass + 1'b1;
          if (int'(wb_pass) == NPASS - 1) begin
            busy    <= 1'b0;
            op_done <= 1'b1;
          end
        end
      end
    end
  end

  // buffer: row writes from the router, block write-back from the lanes
  always_ff @(posedge clk) begin
    if (wr_en)
      for (int w = 0; w < WPR; w++) buf_q[int'(wr_row) * WPR + w] <= wr_data[64*w +: 64];
    if (busy && wb_en)
      for (int l = 0; l < N_BCE; l++) buf_q[int'(wb_pass) * N_BCE + l] <= lane_out[l];
  end

  always_comb
    for (int w = 0; w < WPR; w++) rd_data[64*w +: 64] = buf_q[int'(rd_row) * WPR + w];

  // rows must not be written while an operation is running
  // Checkers are enabled from the first clock after reset release, so the
  // asynchronous reset net itself is not used as synchronous logic.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end
  assert property (@(posedge clk) disable iff (!chk_en) busy |-> !wr_en)
    else $error("bce_array: row write during operation");
endmodule
