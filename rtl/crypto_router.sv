// crypto_router: internal router of a cryptographic engine.
//
// A 512-bit crossbar that moves one row per cycle from one of four sources
// to one of four destinations: 0 Cache RF, 1 BCE array buffer, 2 ACE buffer,
// 3 output register. On go it drives q with the selected source row and
// raises the destination's write strobe in the same cycle; the source row
// address and destination row are handled by the requester. Combinational.
// The endpoints follow the arrows of the architecture figure; the
// single-transfer-per-cycle crossbar is this design's simplest reading.
module crypto_router #(
  parameter int unsigned W = 512
) (
  input  logic         go,
  input  logic [1:0]   src,
  input  logic [1:0]   dst,
  input  logic [W-1:0] d_crf,
  input  logic [W-1:0] d_bce,
  input  logic [W-1:0] d_ace,
  input  logic [W-1:0] d_out,
  output logic [W-1:0] q,
  output logic [3:0]   q_we
);
  always_comb begin
    case (src)
      2'd0:    q = d_crf;
      2'd1:    q = d_bce;
      2'd2:    q = d_ace;
      default: q = d_out;
    endcase
    q_we = go ? (4'b0001 << dst) : 4'b0000;
  end
endmodule
