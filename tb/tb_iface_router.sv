// tb_iface_router: four planes each send bursts of tagged words; checks that
// bursts are never interleaved, that every word arrives in order, that the
// grant rotates between planes, and that outbound words reach the named plane.
module tb_iface_router;
  logic clk = 0, rst_n = 0;
  logic [3:0] pl_valid = 0, pl_last, pl_ready;
  logic [63:0] pl_data [4];
  logic out_valid, out_ready = 0;
  logic [63:0] out_data;
  logic [1:0] grant_plane;
  logic ob_valid = 0, ob_ready;
  logic [63:0] ob_data = 0, po_data;
  logic [1:0] ob_plane = 0;
  logic [3:0] po_valid, po_ready = 4'hf;
  int checks = 0, failures = 0;
  int cnt [4];
  localparam int BURST = 5;

  iface_router dut (.*);
  always #5 clk = ~clk;

  always_comb
    for (int p = 0; p < 4; p++) begin
      pl_data[p] = {32'(p), 32'(cnt[p])};
      pl_last[p] = (cnt[p] % BURST) == BURST - 1;
    end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cur = -1, switches = 0;
    for (int p = 0; p < 4; p++) cnt[p] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 400; cyc++) begin
      pl_valid = 4'($urandom) | 4'b0001;
      out_ready = 1'($urandom);
      #1;
      if (out_valid && out_ready) begin
        int p;
        p = int'(out_data[63:32]);
        checks++;
        if (out_data[31:0] !== 32'(cnt[p])) begin failures++; if (failures < 4) $display("data p=%0d got %0d exp %0d", p, out_data[31:0], cnt[p]); end
        if (cur != -1 && cur != p) begin
          checks++;
          if (cnt[cur] % BURST != 0) begin failures++; if (failures < 4) $display("switch from %0d at cnt %0d t=%0t locked=%b last=%b", cur, cnt[cur], $time, dut.locked, pl_last); end
          switches++;
        end
        cur = p;
        @(posedge clk); #1;
        cnt[p]++;
      end
      @(negedge clk);
    end
    checks++;
    if (switches < 10) begin failures++; $display("only %0d grant changes", switches); end
    pl_valid = 0;
    for (int i = 0; i < 20; i++) begin
      ob_valid = 1; ob_plane = 2'($urandom); ob_data = {$urandom, $urandom};
      #1;
      checks++;
      if (po_valid !== 4'(1 << ob_plane) || po_data !== ob_data || !ob_ready) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
