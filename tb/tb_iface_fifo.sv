// tb_iface_fifo: streams random 64-bit words through a 64 -> 1024 and a
// 512 -> 64 FIFO with random valid and ready, and compares the bit streams.
module tb_iface_fifo;
  logic clk = 0, rst_n = 0;
  // 64 -> 1024
  logic a_iv = 0, a_ir, a_ov, a_or = 0;
  logic [63:0] a_id = 0;
  logic [1023:0] a_od;
  logic [5:0] a_cnt;
  // 512 -> 64
  logic b_iv = 0, b_ir, b_ov, b_or = 0;
  logic [511:0] b_id = 0;
  logic [63:0] b_od;
  logic [5:0] b_cnt;
  int checks = 0, failures = 0;
  logic [63:0] q_in [$];
  logic [63:0] q_b [$];

  iface_fifo #(.W_IN(64), .W_OUT(1024), .DEPTH_BITS(2048)) dut_a (
    .clk, .rst_n, .flush(1'b0), .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od), .count(a_cnt));
  iface_fifo #(.W_IN(512), .W_OUT(64), .DEPTH_BITS(2048)) dut_b (
    .clk, .rst_n, .flush(1'b0), .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od), .count(b_cnt));
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int sent = 0, got = 0, sentb = 0, gotb = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    while (got < 40 * 16 || gotb < 40 * 8) begin
      // A side
      a_iv = (sent < 40 * 16) && 1'($urandom);
      a_id = {$urandom, $urandom};
      a_or = 1'($urandom);
      // B side
      b_iv = (sentb < 40) && 1'($urandom);
      for (int w = 0; w < 16; w++) b_id[32*w +: 32] = $urandom;
      b_or = 1'($urandom);
      #1;
      if (a_ov && a_or) begin
        for (int k = 0; k < 16; k++) begin
          checks++;
          if (a_od[64*k +: 64] !== q_in.pop_front()) failures++;
        end
        got += 16;
      end
      if (a_iv && a_ir) begin q_in.push_back(a_id); sent++; end
      if (b_ov && b_or) begin
        checks++;
        if (b_od !== q_b.pop_front()) failures++;
        gotb++;
      end
      if (b_iv && b_ir) begin
        for (int k = 0; k < 8; k++) q_b.push_back(b_id[64*k +: 64]);
        sentb++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
