// iface_router: multiplexing interface between the planes' cache buffers
// and the cryptographic engines.
//
// Inbound, N_PLANE 64-bit streams compete for one FIFO input: a round-robin
// arbiter grants one plane and holds the grant until that plane marks the
// last word of its burst (pl_last), so a page is not interleaved with another.
// Outbound, one 64-bit stream is steered to the plane named by ob_plane.
// Handshakes are valid/ready; the arbiter state is registered, data paths
// are combinational. Round-robin with burst lock is this design's choice: the
// paper says only that the router arbitrates plane access.
// Lint note: the loop index p is a 32-bit int; only its low PB bits are used.
module iface_router #(
  parameter int unsigned N_PLANE = 4,
  parameter int unsigned W       = 64,
  localparam int unsigned PB = $clog2(N_PLANE)
) (
  input  logic               clk,
  input  logic               rst_n,
  // inbound: planes -> FIFO
  input  logic [N_PLANE-1:0] pl_valid,
  input  logic [N_PLANE-1:0] pl_last,
  input  logic [W-1:0]       pl_data [N_PLANE],
  output logic [N_PLANE-1:0] pl_ready,
  output logic               out_valid,
  output logic [W-1:0]       out_data,
  input  logic               out_ready,
  output logic [PB-1:0]      grant_plane,
  // outbound: FIFO -> one plane
  input  logic               ob_valid,
  input  logic [W-1:0]       ob_data,
  input  logic [PB-1:0]      ob_plane,
  output logic               ob_ready,
  output logic [N_PLANE-1:0] po_valid,
  output logic [W-1:0]       po_data,
  input  logic [N_PLANE-1:0] po_ready
);
  logic          locked;
  logic [PB-1:0] cur, last_gnt, pick;
  logic          any;

  // round-robin pick starting after the last granted plane
  always_comb begin
    pick = last_gnt;
    any  = 1'b0;
    for (int k = 1; k <= N_PLANE; k++) begin
      int p;
      p = (int'(last_gnt) + k) % N_PLANE;
      if (!any && pl_valid[p]) begin
        pick = PB'(p);
        any  = 1'b1;
      end
    end
  end

  logic [PB-1:0] g;
  assign g           = locked ? cur : pick;
  assign grant_plane = g;
  assign out_valid   = (locked || any) && pl_valid[g];
  assign out_data    = pl_data[g];
  always_comb begin
    pl_ready = '0;
    pl_ready[g] = (locked || any) && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; cur <= '0; last_gnt <= PB'(N_PLANE - 1);
    end else if (out_valid && out_ready) begin
      if (pl_last[g]) begin
        locked   <= 1'b0;
        last_gnt <= g;
      end else begin
        locked <= 1'b1;
        cur    <= g;
      end
    end
  end

  assign po_data  = ob_data;
  assign ob_ready = po_ready[ob_plane];
  always_comb begin
    po_valid = '0;
    po_valid[ob_plane] = ob_valid;
  end
endmodule
