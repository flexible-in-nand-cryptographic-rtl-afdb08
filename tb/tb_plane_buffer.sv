// tb_plane_buffer: senses a random page into the page buffer, copies it to
// the cache buffer (checking the copy time of PAGE_BYTES/2 cycles), streams
// part of it to the router side, writes new words into the cache buffer,
// copies them back and reads the page out on the array side.
module tb_plane_buffer;
  localparam int NW = 2048;
  logic clk = 0, rst_n = 0;
  logic arr_rst = 0, arr_in_valid = 0, arr_out_valid, arr_out_ready = 0;
  logic [15:0] arr_in_data = 0, arr_out_data;
  logic cp_p2c = 0, cp_c2p = 0, busy;
  logic io_rd_start = 0, io_wr_start = 0;
  logic [9:0] io_base = 0, io_len = 0;
  logic io_out_valid, io_out_last, io_out_ready = 0, io_in_valid = 0, io_in_ready;
  logic [63:0] io_out_data, io_in_data = 0;
  logic [15:0] mdl [NW];
  int checks = 0, failures = 0;

  plane_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cyc;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); arr_rst = 1; @(negedge clk); arr_rst = 0;
    for (int i = 0; i < NW; i++) begin
      mdl[i] = 16'($urandom);
      arr_in_valid = 1; arr_in_data = mdl[i]; @(negedge clk);
    end
    arr_in_valid = 0;
    cp_p2c = 1; @(negedge clk); cp_p2c = 0; cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NW + 1) begin failures++; $display("copy took %0d", cyc); end
    // read 64-bit words 100..139
    io_base = 10'd100; io_len = 10'd40; io_rd_start = 1; @(negedge clk); io_rd_start = 0;
    for (int k = 0; k < 40; ) begin
      io_out_ready = 1'($urandom); #1;
      if (io_out_valid && io_out_ready) begin
        checks++;
        if (io_out_data !== {mdl[(100+k)*4+3], mdl[(100+k)*4+2], mdl[(100+k)*4+1], mdl[(100+k)*4]}) failures++;
        checks++;
        if (io_out_last !== (k == 39)) failures++;
        k++;
      end
      @(negedge clk);
    end
    io_out_ready = 0;
    // write 64-bit words 500..511 of the cache
    io_base = 10'd500; io_wr_start = 1; @(negedge clk); io_wr_start = 0;
    for (int k = 0; k < 12; ) begin
      io_in_valid = 1; io_in_data = {$urandom, $urandom}; #1;
      if (io_in_ready) begin
        for (int j = 0; j < 4; j++) mdl[(500+k)*4 + j] = io_in_data[16*j +: 16];
        k++;
      end
      @(negedge clk);
    end
    io_in_valid = 0;
    cp_c2p = 1; @(negedge clk); cp_c2p = 0;
    while (busy) @(negedge clk);
    @(negedge clk); arr_rst = 1; @(negedge clk); arr_rst = 0;
    for (int k = 0; k < NW; ) begin
      arr_out_ready = 1'($urandom); #1;
      if (arr_out_valid && arr_out_ready) begin
        checks++;
        if (arr_out_data !== mdl[k]) begin failures++; if (failures < 5) $display("word %0d", k); end
        k++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
