// iface_fifo: width-converting FIFO of the interface unit.
//
// Buffers data between links of different widths and re-aligns it: W_IN-bit
// words go in, W_OUT-bit words come out, with the first bits written
// appearing in the low end of the first output word. Storage is DEPTH_BITS
// kept as units of G = min(W_IN, W_OUT) bits in a ring. in_ready is high
// when W_IN/G units are free, out_valid when W_OUT/G units are held; both
// transfers take effect on the clock edge (first-word-fall-through output).
// flush empties it. The chip uses one per engine for each direction:
// 64 -> 1024 bits from the planes to the LDPC decoder and 512 -> 64 bits
// from the Data RF back to the planes (widths printed on the architecture
// figure); the depth is this design's choice.
module iface_fifo #(
  parameter int unsigned W_IN       = 64,
  parameter int unsigned W_OUT      = 1024,
  parameter int unsigned DEPTH_BITS = 2048,
  localparam int unsigned G   = (W_IN < W_OUT) ? W_IN : W_OUT,
  localparam int unsigned NU  = DEPTH_BITS / G,
  localparam int unsigned RI  = W_IN / G,
  localparam int unsigned RO  = W_OUT / G,
  localparam int unsigned PW  = $clog2(NU),
  localparam int unsigned CW  = $clog2(NU + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [W_IN-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [W_OUT-1:0] out_data,
  output logic [CW-1:0]    count
);
  logic [G-1:0]  mem [NU];
  logic [PW-1:0] wp, rp;

  assign in_ready  = (int'(count) + RI) <= NU;
  assign out_valid = int'(count) >= RO;

  always_comb
    for (int u = 0; u < RO; u++) out_data[G*u +: G] = mem[(int'(rp) + u) % NU];

  logic do_in, do_out;
  assign do_in  = in_valid && in_ready;
  assign do_out = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_in)  wp <= PW'((int'(wp) + RI) % NU);
      if (do_out) rp <= PW'((int'(rp) + RO) % NU);
      count <= CW'(int'(count) + (do_in ? RI : 0) - (do_out ? RO : 0));
    end
  end

  always_ff @(posedge clk)
    if (do_in && !flush)
      for (int u = 0; u < RI; u++) mem[(int'(wp) + u) % NU] <= in_data[G*u +: G];
endmodule
