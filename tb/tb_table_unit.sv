// tb_table_unit: fills all eight S-box tables with random bytes, keeps a
// copy, and checks byte and nibble lookups on random inputs.
module tb_table_unit;
  logic clk = 0;
  logic [31:0] in0, in1;
  logic        ctrl;
  logic        tbl_we = 0;
  logic [2:0]  tbl_sel = 0;
  logic [7:0]  tbl_addr = 0, tbl_data = 0;
  logic [63:0] out;
  logic [7:0]  mdl [8][256];
  int checks = 0, failures = 0;

  table_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ctrl = 0; in0 = 0; in1 = 0;
    for (int t = 0; t < 8; t++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        tbl_we = 1; tbl_sel = 3'(t); tbl_addr = 8'(a); tbl_data = 8'($urandom);
        mdl[t][a] = tbl_data;
      end
    @(negedge clk); tbl_we = 0;
    for (int i = 0; i < 2000; i++) begin
      logic [63:0] v, exp;
      in0 = $urandom; in1 = $urandom; ctrl = 1'($urandom);
      #1;
      v = {in1, in0};
      for (int b = 0; b < 8; b++) begin
        logic [7:0] s;
        s = mdl[b][v[8*b +: 8]];
        exp[8*b +: 8] = ctrl ? {4'b0, s[3:0]} : s;
      end
      checks++;
      if (out !== exp) begin
        failures++;
        if (failures < 10) $display("mismatch in=%h out=%h exp=%h", v, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
