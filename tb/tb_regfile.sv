// tb_regfile: random writes and reads against a model array; checks the
// one-cycle read latency.
module tb_regfile;
  logic clk = 0, we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [511:0] wdata = 0, rdata;
  logic [511:0] mdl [16];
  int checks = 0, failures = 0;

  regfile dut (.*);
  always #5 clk = ~clk;

  function automatic logic [511:0] rnd();
    for (int i = 0; i < 16; i++) rnd[32*i +: 32] = $urandom;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); we = 1; waddr = 4'(r); wdata = rnd(); mdl[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 500; i++) begin
      logic [3:0] a;
      a = 4'($urandom);
      @(negedge clk);
      raddr = a;
      we = 1'($urandom); waddr = 4'($urandom); wdata = rnd();
      @(posedge clk); #1;
      checks++;
      if (rdata !== mdl[a]) begin failures++; if (failures < 5) $display("row %0d wrong", a); end
      if (we) mdl[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
