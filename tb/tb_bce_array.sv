// tb_bce_array: loads the 256-byte buffer, runs SIMD operations (64-bit
// rotate, key XOR through the logic unit, S-box substitution) on all 32
// blocks and checks every block and the operation latency (op_done 4 cycles after acceptance).
module tb_bce_array;
  import fv_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [1:0] wr_row = 0, rd_row = 0;
  logic [511:0] wr_data = 0, rd_data;
  logic key_we = 0;
  logic [511:0] key_data = 0;
  bce_cfg_t cfg;
  logic op_valid = 0, op_ready, op_done;
  bce_op_t op;
  logic [63:0] mdl [32];
  int checks = 0, failures = 0;

  bce_array dut (.*);
  always #5 clk = ~clk;

  task automatic run_op(bce_op_t o);
    int cyc;
    @(negedge clk); op = o; op_valid = 1;
    @(negedge clk); op_valid = 0; cyc = 1;
    while (!op_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 4) begin failures++; $display("latency %0d != 4", cyc); end
  endtask

  task automatic compare(string what);
    for (int r = 0; r < 4; r++) begin
      rd_row = 2'(r); #1;
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (rd_data[64*w +: 64] !== mdl[r*8 + w]) begin
          failures++;
          if (failures < 10) $display("%s: block %0d got %h exp %h", what, r*8 + w, rd_data[64*w +: 64], mdl[r*8 + w]);
        end
      end
    end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bce_op_t o;
    cfg = '0; op = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); wr_en = 1; wr_row = 2'(r);
      for (int w = 0; w < 8; w++) begin
        mdl[r*8 + w] = {$urandom, $urandom};
        wr_data[64*w +: 64] = mdl[r*8 + w];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 16; i++) key_data[32*i +: 32] = $urandom;
    key_we = 1; @(negedge clk); key_we = 0;
    for (int t = 0; t < 8; t++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk); cfg.tu_we = 1; cfg.tu_sel = 3'(t); cfg.tu_addr = 8'(a); cfg.tu_data = 8'(a * 7 + 3 + t);
      end
    @(negedge clk); cfg = '0;
    compare("load");
    // 1: 64-bit rotate right by 7
    o = '0; o.ctrl.sel = SEL_SU; o.ctrl.su = 6'd7; o.ctrl.su_mode = '{w64: 1'b1, kind: SH_ROT, left: 1'b0};
    run_op(o);
    for (int b = 0; b < 32; b++) mdl[b] = (mdl[b] >> 7) | (mdl[b] << 57);
    compare("rotate");
    // 2: XOR with the lane's key through the logic unit (byte 0 of each half)
    o = '0; o.ctrl.sel = SEL_LOU; o.ctrl.loc = {1'b0, 2'd3, 6'b0}; o.key_in1 = 1'b1;
    run_op(o);
    for (int b = 0; b < 32; b++) begin
      logic [31:0] k;
      k = key_data[32*(b % 16) +: 32];
      mdl[b] = {24'b0, k[7:0], 24'b0, mdl[b][7:0]};
    end
    compare("key select");
    // 3: S-box substitution
    o = '0; o.ctrl.sel = SEL_TU;
    run_op(o);
    for (int b = 0; b < 32; b++)
      for (int y = 0; y < 8; y++) mdl[b][8*y +: 8] = 8'(mdl[b][8*y +: 8] * 7 + 3 + y);
    compare("sbox");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
