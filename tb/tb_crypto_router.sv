// tb_crypto_router: every source/destination pair, with and without go.
module tb_crypto_router;
  logic go;
  logic [1:0] src, dst;
  logic [511:0] d_crf, d_bce, d_ace, d_out, q;
  logic [3:0] q_we;
  int checks = 0, failures = 0;

  crypto_router dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 200; i++) begin
      logic [511:0] d [4];
      for (int s = 0; s < 4; s++) for (int w = 0; w < 16; w++) d[s][32*w +: 32] = $urandom;
      d_crf = d[0]; d_bce = d[1]; d_ace = d[2]; d_out = d[3];
      src = 2'($urandom); dst = 2'($urandom); go = 1'($urandom);
      #1;
      checks++;
      if (q !== d[src]) failures++;
      checks++;
      if (q_we !== (go ? 4'(1 << dst) : 4'b0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
