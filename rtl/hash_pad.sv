// hash_pad: padding unit of the hash ALU cluster.
//
// Pads the final block of a message the way SHA-2 (256-bit variant, 512-bit
// blocks) requires: after the nbytes valid message bytes comes a byte 0x80,
// then zeros, and the message length in bits as a 64-bit big-endian number in
// the last eight bytes. If fewer than nine bytes are free (nbytes > 55) the
// length moves to a second block and two is set. Bytes are big-endian in the
// 512-bit word (byte 0 = bits 511:504). Combinational.
// The paper only names a padding unit; SHA-2 padding is this design's reading.
module hash_pad (
  input  logic [511:0] blk_in,
  input  logic [5:0]   nbytes,
  input  logic [63:0]  msg_bits,
  output logic [511:0] blk0,
  output logic [511:0] blk1,
  output logic         two
);
  always_comb begin
    two  = (nbytes > 6'd55);
    blk0 = '0;
    blk1 = '0;
    for (int b = 0; b < 64; b++) begin
      if (b < int'(nbytes))       blk0[511 - 8*b -: 8] = blk_in[511 - 8*b -: 8];
      else if (b == int'(nbytes)) blk0[511 - 8*b -: 8] = 8'h80;
    end
    if (two) blk1[63:0] = msg_bits;
    else     blk0[63:0] = msg_bits;
  end
endmodule
