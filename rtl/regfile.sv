// regfile: register file of 512-bit rows, used as the Data RF and the Cache
// RF of a cryptographic engine (1 KB each = 16 rows).
//
// One write port and one read port. Reads are registered: rdata shows row
// raddr one cycle after it is presented. The Data RF receives decoded rows
// from the LDPC decoder and feeds the interface FIFO; the Cache RF holds
// working rows and derived keys for the router. Port count and read timing
// are this design's choices; size and width follow the architecture figure.
module regfile #(
  parameter int unsigned BYTES = 1024,
  parameter int unsigned W     = 512,
  localparam int unsigned NROW = BYTES * 8 / W,
  localparam int unsigned AW   = $clog2(NROW)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [NROW];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
