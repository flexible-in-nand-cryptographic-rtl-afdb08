// plane_buffer: buffer unit of one plane - a page buffer and a cache buffer.
//
// Both are PAGE_BYTES deep and organised as 16-bit words, the width of the
// link between them. The page buffer faces the memory array: sensed words
// arrive on arr_in_* (written from word 0 after arr_rst) and words to be
// programmed leave on arr_out_* (read from word 0 after arr_rst). cp_p2c
// copies the page buffer into the cache buffer and cp_c2p the reverse, one
// 16-bit word per cycle (PAGE_BYTES/2 cycles; busy meanwhile), so the cache
// buffer can serve the router while the page buffer senses or programs the
// next page. Towards the router the cache buffer streams IO_W-bit words: after
// io_rd_start it sends io_len words from word io_base (io_last on the final
// one); after io_wr_start it stores incoming words from io_base on.
// Sizes follow the paper (4 KB each, 16-bit link); the array-side width and
// the streaming control are this design's.
module plane_buffer #(
  parameter int unsigned PAGE_BYTES = 4096,
  parameter int unsigned IO_W       = 64,
  localparam int unsigned NW  = PAGE_BYTES / 2,        // 16-bit words
  localparam int unsigned AW  = $clog2(NW),
  localparam int unsigned R   = IO_W / 16,
  localparam int unsigned NIO = NW / R,
  localparam int unsigned IW  = $clog2(NIO + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // array side
  input  logic            arr_rst,
  input  logic            arr_in_valid,
  input  logic [15:0]     arr_in_data,
  output logic            arr_out_valid,
  input  logic            arr_out_ready,
  output logic [15:0]     arr_out_data,
  // page <-> cache copies
  input  logic            cp_p2c,
  input  logic            cp_c2p,
  output logic            busy,
  // router side
  input  logic            io_rd_start,
  input  logic            io_wr_start,
  input  logic [IW-1:0]   io_base,
  input  logic [IW-1:0]   io_len,
  output logic            io_out_valid,
  output logic            io_out_last,
  output logic [IO_W-1:0] io_out_data,
  input  logic            io_out_ready,
  input  logic            io_in_valid,
  input  logic [IO_W-1:0] io_in_data,
  output logic            io_in_ready
);
  logic [15:0] page [NW];
  logic [15:0] cache [NW];

  logic [AW:0]   ap, op, cp;
  logic          cp_dir, cp_busy;   // cp_dir 0: page->cache
  logic [IW-1:0] rp, rend, wp;
  logic          rd_busy, wr_busy;

  assign busy = cp_busy;

  // array side
  assign arr_out_valid = (op < (AW + 1)'(NW));
  assign arr_out_data  = page[op[AW-1:0]];
  // router side
  assign io_out_valid = rd_busy;
  assign io_out_last  = rd_busy && (rp + 1'b1 == rend);
  always_comb
    for (int k = 0; k < R; k++) io_out_data[16*k +: 16] = cache[(int'(rp) * R + k) % NW];
  assign io_in_ready = wr_busy && !cp_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap <= '0; op <= (AW + 1)'(NW); cp <= '0; cp_dir <= 1'b0; cp_busy <= 1'b0;
      rp <= '0; rend <= '0; wp <= '0; rd_busy <= 1'b0; wr_busy <= 1'b0;
    end else begin
      if (arr_rst) begin
        ap <= '0; op <= '0;
      end else begin
        if (arr_in_valid && ap < (AW + 1)'(NW)) ap <= ap + 1'b1;
        if (arr_out_valid && arr_out_ready) op <= op + 1'b1;
      end
      if (!cp_busy && (cp_p2c || cp_c2p)) begin
        cp_busy <= 1'b1; cp_dir <= cp_c2p; cp <= '0;
      end else if (cp_busy) begin
        cp <= cp + 1'b1;
        if (cp == (AW + 1)'(NW - 1)) cp_busy <= 1'b0;
      end
      if (io_rd_start) begin
        rp <= io_base; rend <= io_base + io_len; rd_busy <= (io_len != '0);
      end else if (rd_busy && io_out_ready) begin
        rp <= rp + 1'b1;
        if (rp + 1'b1 == rend) rd_busy <= 1'b0;
      end
      if (io_wr_start) begin
        wp <= io_base; wr_busy <= 1'b1;
      end else if (io_in_valid && io_in_ready) begin
        wp <= wp + 1'b1;
        if (wp + 1'b1 == IW'(NIO)) wr_busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (arr_in_valid && !arr_rst && ap < (AW + 1)'(NW)) page[ap[AW-1:0]] <= arr_in_data;
    if (cp_busy && cp_dir) page[cp[AW-1:0]] <= cache[cp[AW-1:0]];
    if (cp_busy && !cp_dir) cache[cp[AW-1:0]] <= page[cp[AW-1:0]];
    else if (io_in_valid && io_in_ready)
      for (int k = 0; k < R; k++) cache[(int'(wp) * R + k) % NW] <= io_in_data[16*k +: 16];
  end
endmodule
