// tb_output_register: fills rows from the 64-bit host side, reads them from
// the engine side, writes rows from the engine side and streams them out to
// the host with back-pressure.
module tb_output_register;
  logic clk = 0, rst_n = 0;
  logic eng_we = 0;
  logic [2:0] eng_row = 0, eng_rrow = 0, ho_row = 0;
  logic [511:0] eng_wdata = 0, eng_rdata;
  logic host_in_valid = 0, host_in_ready, hi_clear = 0;
  logic [63:0] host_in_data = 0, host_out_data;
  logic [3:0] hi_rows, ho_nrows = 0;
  logic ho_start = 0, host_out_valid, host_out_ready = 0, ho_busy;
  logic [63:0] words [64];
  int checks = 0, failures = 0;

  output_register dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // host fills three rows
    for (int i = 0; i < 24; i++) begin
      words[i] = {$urandom, $urandom};
      host_in_valid = 1; host_in_data = words[i];
      @(negedge clk);
      while (!host_in_ready) @(negedge clk);
    end
    host_in_valid = 0;
    checks++; if (hi_rows != 4'd3) begin failures++; $display("hi_rows %0d", hi_rows); end
    for (int r = 0; r < 3; r++) begin
      eng_rrow = 3'(r); #1;
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (eng_rdata[64*w +: 64] !== words[r*8 + w]) failures++;
      end
    end
    // engine writes rows 5 and 6
    for (int r = 5; r < 7; r++) begin
      @(negedge clk); eng_we = 1; eng_row = 3'(r);
      for (int w = 0; w < 8; w++) begin
        words[r*8 + w] = {$urandom, $urandom};
        eng_wdata[64*w +: 64] = words[r*8 + w];
      end
    end
    @(negedge clk); eng_we = 0;
    // stream rows 5..6 out with random back-pressure
    ho_row = 3'd5; ho_nrows = 4'd2; ho_start = 1;
    @(negedge clk); ho_start = 0;
    for (int k = 0; k < 16; ) begin
      host_out_ready = 1'($urandom);
      #1;
      if (host_out_valid && host_out_ready) begin
        checks++;
        if (host_out_data !== words[40 + k]) begin failures++; $display("out %0d wrong", k); end
        k++;
      end
      @(negedge clk);
    end
    host_out_ready = 0;
    @(negedge clk);
    checks++; if (ho_busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
