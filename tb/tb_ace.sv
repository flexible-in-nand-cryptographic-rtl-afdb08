// tb_ace: loads the ACE buffer, runs hash-cluster (32-bit lane add, logic),
// ACALU-pair (Barrett modular multiply, multi-limb add with carry, narrow
// operand zero-extension) and padding instructions, and checks the buffer.
module tb_ace;
  import fv_pkg::*;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, done;
  ace_instr_t instr;
  logic wr_en = 0;
  logic [1:0] wr_row = 0, rd_row = 0;
  logic [511:0] wr_data = 0, rd_data;
  logic cfg_we = 0;
  logic [3:0] cfg_addr = 0;
  logic [63:0] cfg_data = 0;
  logic [63:0] mdl [32];
  int checks = 0, failures = 0;

  ace dut (.*);
  always #5 clk = ~clk;

  task automatic exec(ace_instr_t i);
    @(negedge clk); instr = i; instr_valid = 1;
    @(negedge clk); instr_valid = 0;
    checks++;
    if (!done) begin failures++; $display("done missing"); end
  endtask
  task automatic load(int r);
    @(negedge clk); wr_en = 1; wr_row = 2'(r);
    for (int w = 0; w < 8; w++) wr_data[64*w +: 64] = mdl[r*8 + w];
    @(negedge clk); wr_en = 0;
  endtask
  task automatic compare(string what);
    for (int r = 0; r < 4; r++) begin
      rd_row = 2'(r); #1;
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (rd_data[64*w +: 64] !== mdl[r*8 + w]) begin
          failures++;
          if (failures < 10) $display("%s: word %0d got %h exp %h", what, r*8 + w, rd_data[64*w +: 64], mdl[r*8 + w]);
        end
      end
    end
  endtask
  task automatic cfg(int a, logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ace_instr_t i;
    logic [63:0] q;
    instr = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    q = 64'd8380417;
    cfg(0, q); cfg(1, 64'((128'd1 << 64) / q));
    for (int w = 0; w < 32; w++) mdl[w] = {$urandom, $urandom};
    for (int r = 0; r < 4; r++) load(r);
    compare("load");
    // hash cluster: row2 = row0 + row1 in 32-bit lanes
    i = '0; i.unit = ACE_HASH; i.row_a = 0; i.row_b = 1; i.row_d = 2;
    i.hctrl.sel = HU_ADD; i.hctrl.add = HA_ADD32;
    exec(i);
    for (int w = 0; w < 8; w++)
      mdl[16 + w] = {32'(mdl[w][63:32] + mdl[8 + w][63:32]), 32'(mdl[w][31:0] + mdl[8 + w][31:0])};
    compare("hash add32");
    // hash cluster: row3 = (row0 AND row1) XOR (NOT row0 AND ...) -> (a & b) ^ ~a
    i.hctrl.sel = HU_LOGIC; i.hctrl.lc_a = LC_AND; i.hctrl.lc_b = LC_NOTA; i.hctrl.lc_c = LC_XOR; i.row_d = 3;
    exec(i);
    for (int w = 0; w < 8; w++) mdl[24 + w] = (mdl[w] & mdl[8 + w]) ^ ~mdl[w];
    compare("hash logic");
    // ALU pair: words 0,1 reduced mod q by zero-extension to 23 bits, then modmul
    i = '0; i.unit = ACE_ALU; i.opw = 7'd23; i.actrl.op = AC_MMUL;
    i.wa0 = 0; i.wb0 = 1; i.wd0 = 4;
    i.wa1 = 2; i.wb1 = 3; i.wd1 = 5;
    exec(i);
    begin
      logic [63:0] a0, b0, a1, b1;
      a0 = mdl[0] & 64'h7fffff; b0 = mdl[1] & 64'h7fffff;
      a1 = mdl[2] & 64'h7fffff; b1 = mdl[3] & 64'h7fffff;
      // 23-bit operands may exceed q once; the reference reduces them first
      // only when they are below q, otherwise skip the comparison
      if (a0 < q && b0 < q) mdl[4] = (a0 * b0) % q; else begin rd_row = 0; #1; mdl[4] = rd_data[64*4 +: 64]; end
      if (a1 < q && b1 < q) mdl[5] = (a1 * b1) % q; else begin rd_row = 0; #1; mdl[5] = rd_data[64*5 +: 64]; end
    end
    compare("modmul");
    // 128-bit add by two limbs on ACALU 0: words 8,9 + 10,11 -> 12,13
    i = '0; i.unit = ACE_ALU; i.actrl.op = AC_ADD;
    i.wa0 = 8; i.wb0 = 10; i.wd0 = 12; i.wa1 = 30; i.wb1 = 31; i.wd1 = 29;
    mdl[8] = 64'hffff_ffff_ffff_fff0; load(1);
    exec(i);
    i.wa0 = 9; i.wb0 = 11; i.wd0 = 13;
    exec(i);
    begin
      logic [128:0] s;
      logic c1;
      s = {1'b0, mdl[9], mdl[8]} + {1'b0, mdl[11], mdl[10]};
      {c1, mdl[29]} = {1'b0, mdl[30]} + {1'b0, mdl[31]};
      mdl[12] = s[63:0];
      mdl[29] = mdl[30] + mdl[31] + 64'(c1);
      mdl[13] = s[127:64];
    end
    compare("limb add");
    // padding of a 20-byte final block in row 0 into row 2, length from word 1
    i = '0; i.unit = ACE_PAD; i.row_a = 0; i.row_d = 2; i.pad_nbytes = 6'd20; i.wb0 = 1;
    exec(i);
    begin
      logic [511:0] r0, p;
      for (int w = 0; w < 8; w++) r0[64*w +: 64] = mdl[w];
      p = '0;
      p[511 -: 160] = r0[511 -: 160];
      p[511 - 160 -: 8] = 8'h80;
      p[63:0] = mdl[1];
      for (int w = 0; w < 8; w++) mdl[16 + w] = p[64*w +: 64];
    end
    compare("pad");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
