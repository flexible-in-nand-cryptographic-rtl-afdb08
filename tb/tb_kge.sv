// tb_kge: derives a two-block key from a fixed root key, salt and context
// and compares it with SHA-256 digests of the same 52-byte messages computed
// by an independent SHA-256 implementation; also checks the word index on
// the two 32-bit output ports and the derivation time.
module tb_kge;
  logic clk = 0, rst_n = 0;
  logic [255:0] puf_key = 256'h0123456789abcdeffedcba98765432100f1e2d3c4b5a69788796a5b4c3d2e1f0;
  logic [63:0] salt = 64'ha5a5a5a55a5a5a5a, context_w = 64'h0000000100020003;
  logic start = 0;
  logic [1:0] nblk = 2;
  logic busy, kv, done;
  logic [31:0] kw0, kw1;
  logic [2:0] kidx;
  logic [511:0] exp_key = {256'h16561699f852897d95c3dbe8503d6221c0a2926e51030f5f55366791e8e975ab,
                           256'hd7ed1001c87cd4b6f5775c575453332699da05f6f59423c4c4e7025425f8a2a2};
  logic [511:0] got;
  int checks = 0, failures = 0, beats = 0, cyc = 0;

  kge dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      nblk = (run == 0) ? 2'd2 : 2'd1;
      got = '0; beats = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin
        if (kv) begin
          checks++;
          if (kidx != 3'(beats)) failures++;
          got[511 - 64*beats -: 64] = {kw0, kw1};
          beats++;
        end
        @(negedge clk); cyc++;
      end
      checks++;
      if (run == 0 && got !== exp_key) begin failures++; $display("key %h", got); end
      if (run == 1 && got[511:256] !== exp_key[511:256]) begin failures++; $display("key %h", got); end
      checks++;
      if (beats != 4 * int'(nblk)) failures++;
      checks++;
      if (cyc > 75 * int'(nblk)) begin failures++; $display("derivation took %0d cycles", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
