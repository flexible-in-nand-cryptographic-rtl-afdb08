// tb_hash_pad: checks SHA-2 padding of a final block for every byte count,
// byte by byte, including the two-block case.
module tb_hash_pad;
  logic [511:0] blk_in, blk0, blk1;
  logic [5:0] nbytes;
  logic [63:0] msg_bits;
  logic two;
  int checks = 0, failures = 0;

  hash_pad dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 64; n++) begin
      logic [7:0] m [128];
      for (int b = 0; b < 64; b++) blk_in[511 - 8*b -: 8] = 8'($urandom);
      nbytes = 6'(n); msg_bits = {$urandom, $urandom};
      // expected message stream of 64 or 128 bytes
      for (int b = 0; b < 128; b++) m[b] = 0;
      for (int b = 0; b < n; b++) m[b] = blk_in[511 - 8*b -: 8];
      m[n] = 8'h80;
      for (int b = 0; b < 8; b++) m[(n > 55 ? 120 : 56) + b] = msg_bits[63 - 8*b -: 8];
      #1;
      checks++;
      if (two !== (n > 55)) failures++;
      for (int b = 0; b < 64; b++) begin
        checks++;
        if (blk0[511 - 8*b -: 8] !== m[b]) failures++;
        if (n > 55) begin
          checks++;
          if (blk1[511 - 8*b -: 8] !== m[64 + b]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
