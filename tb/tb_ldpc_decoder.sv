// tb_ldpc_decoder: encodes random data with the parity equations of the
// code (written out here), injects 0 or 1 bit error, and checks that the
// decoder returns the data and flags success. Error-free words must finish
// in one cycle with no flips; single errors need exactly one flip.
module tb_ldpc_decoder;
  localparam int Z = 64, NB = 16, N = 1024, K = 896;
  logic clk = 0, rst_n = 0;
  logic cw_valid = 0, cw_ready, done, ok;
  logic [N-1:0] cw;
  logic [K-1:0] data;
  logic [5:0] iters;
  int checks = 0, failures = 0;

  ldpc_decoder dut (.*);
  always #5 clk = ~clk;

  function automatic logic [N-1:0] encode(logic [K-1:0] d);
    logic [N-1:0] c;
    c = '0;
    c[K-1:0] = d;
    for (int r = 0; r < Z; r++) begin
      logic p0, p1;
      p0 = 0; p1 = 0;
      for (int b = 0; b < NB - 2; b++) begin
        p0 ^= d[b*Z + r];
        p1 ^= d[b*Z + ((r + b) % Z)];
      end
      c[(NB-2)*Z + r] = p0;
      c[(NB-1)*Z + r] = p1;
    end
    return c;
  endfunction

  task automatic decode(logic [N-1:0] w, logic [K-1:0] exp, int nerr);
    int cyc;
    @(negedge clk); cw = w; cw_valid = 1;
    @(negedge clk); cw_valid = 0; cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (!ok || data !== exp) begin
      failures++;
      if (failures < 10) $display("nerr=%0d ok=%b iters=%0d data mismatch=%b", nerr, ok, iters, data !== exp);
    end
    if (nerr <= 1) begin
      checks++;
      if (iters != 6'(nerr)) begin failures++; $display("nerr=%0d took %0d flips", nerr, iters); end
    end
  endtask

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      logic [K-1:0] d;
      logic [N-1:0] c;
      int nerr;
      for (int w = 0; w < K / 32; w++) d[32*w +: 32] = $urandom;
      c = encode(d);
      nerr = t % 2;
      if (nerr == 1) c[$urandom_range(0, N - 1)] ^= 1'b1;
      decode(c, d, nerr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
