// benes_net: W-input Benes permutation network of 2x2 switches.
//
// A butterfly half (switch distances W/2 .. 1) followed by an inverse
// butterfly half (2 .. W/2) gives 2*log2(W)-1 columns of W/2 switches; any
// permutation of the W bits can be set up. Column s, switch k exchanges the
// pair (i, i+d) where i is the k-th index with bit d clear and d is the
// column's distance; cfg bit s*(W/2)+k set means "cross". Combinational.
module benes_net #(
  parameter int unsigned W = 32,
  localparam int unsigned L = $clog2(W),
  localparam int unsigned NS = 2 * L - 1
) (
  input  logic [W-1:0]          din,
  input  logic [NS*(W/2)-1:0]   cfg,
  output logic [W-1:0]          dout
);
  logic [W-1:0] stg [NS+1];
  assign stg[0] = din;

  for (genvar s = 0; s < NS; s++) begin : g_col
    localparam int unsigned D = (s < L) ? (W >> (s + 1)) : (1 << (s - L + 1));
    for (genvar k = 0; k < W / 2; k++) begin : g_sw
      // k-th index with bit D clear: insert a 0 at bit position log2(D)
      localparam int unsigned LO = k % D;
      localparam int unsigned I  = ((k / D) * 2 * D) + LO;
      logic x;
      assign x = cfg[s*(W/2) + k];
      assign stg[s+1][I]     = x ? stg[s][I+D] : stg[s][I];
      assign stg[s+1][I+D]   = x ? stg[s][I]   : stg[s][I+D];
    end
  end

  assign dout = stg[NS];
endmodule
