// tb_crypto_engine: drives one cryptographic engine directly through its
// control word and checks each datapath move.
//
// Covered: a 1024-bit codeword (with one flipped bit) streamed into the
// inbound FIFO, decoded and split into Data RF rows 0-1; Data RF -> Cache RF;
// Cache RF -> router -> BCE buffer; one BCE rotate operation; BCE -> router ->
// output register -> host; host -> output register -> ACE and back; key
// generation into the staging register and Cache RF row 15; Data RF rows
// pushed through the outbound FIFO as 64-bit words. Expected values come from
// an LDPC encoder, SHA-256 and rotations computed here.
module tb_crypto_engine;
  import fv_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  eng_ctrl_t    ctrl = '0;
  eng_stat_t    stat;
  bce_cfg_t     bce_cfg = '0;
  ace_instr_t   ace_instr = '0;
  logic [255:0] puf_key;
  logic [63:0]  salt, ctx;
  logic         ib_valid = 0, ib_ready, ob_valid, ob_ready_in = 0;
  logic [63:0]  ib_data = 0, ob_data;
  logic         hin_valid = 0, hin_ready, hout_valid, hout_ready = 0;
  logic [63:0]  hin_data = 0, hout_data;

  crypto_engine dut (
    .clk, .rst_n, .ctrl, .stat, .bce_cfg, .ace_cfg_we(1'b0), .ace_cfg_addr(4'd0), .ace_cfg_data(64'd0),
    .ace_instr, .puf_key, .kdf_salt(salt), .kdf_context(ctx),
    .ib_valid, .ib_ready, .ib_data, .ob_valid, .ob_ready_in, .ob_data,
    .host_in_valid(hin_valid), .host_in_ready(hin_ready), .host_in_data(hin_data),
    .host_out_valid(hout_valid), .host_out_ready(hout_ready), .host_out_data(hout_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [31:0] rotr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic logic [255:0] sha256_1blk(logic [511:0] blk);
    logic [31:0] k [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    logic [31:0] h [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                           32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    logic [31:0] w [64];
    logic [31:0] a, b, c, d, e, f, g, hh, t1, t2;
    for (int i = 0; i < 16; i++) w[i] = blk[511 - 32*i -: 32];
    for (int i = 16; i < 64; i++)
      w[i] = (rotr(w[i-2], 17) ^ rotr(w[i-2], 19) ^ (w[i-2] >> 10)) + w[i-7]
           + (rotr(w[i-15], 7) ^ rotr(w[i-15], 18) ^ (w[i-15] >> 3)) + w[i-16];
    {a, b, c, d, e, f, g, hh} = {h[0], h[1], h[2], h[3], h[4], h[5], h[6], h[7]};
    for (int i = 0; i < 64; i++) begin
      t1 = hh + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g)) + k[i] + w[i];
      t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
      hh = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
    end
    return {h[0] + a, h[1] + b, h[2] + c, h[3] + d, h[4] + e, h[5] + f, h[6] + g, h[7] + hh};
  endfunction

  function automatic logic [1023:0] ldpc_encode(logic [895:0] d);
    logic [1023:0] cw;
    cw = '0;
    cw[895:0] = d;
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < 14; c++) begin
        cw[896 + r]      ^= d[c*64 + r];
        cw[960 + r]      ^= d[c*64 + (r + c) % 64];
      end
    return cw;
  endfunction

  function automatic logic [63:0] rotl64(logic [63:0] x, int n);
    return (x << n) | (x >> (64 - n));
  endfunction

  // one control cycle
  task automatic step(eng_ctrl_t c);
    @(negedge clk); ctrl = c;
    @(negedge clk); ctrl = '0;
  endtask

  logic [895:0]  d;
  logic [1023:0] cw;
  logic [511:0]  row0, row1, key;
  logic [63:0]   got [$];
  eng_ctrl_t     c;
  int            fb, t;

  initial begin
    puf_key = {8{$urandom}};
    salt = {$urandom, $urandom}; ctx = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- codeword in, decode ----
    for (int b = 0; b < 28; b++) d[32*b +: 32] = $urandom;
    cw = ldpc_encode(d);
    fb = int'($urandom % 1024);
    cw[fb] = !cw[fb];
    for (int w = 0; w < 16; w++) begin
      @(negedge clk); ib_valid = 1; ib_data = cw[64*w +: 64];
      @(posedge clk); check(ib_ready, "inbound FIFO accepts");
    end
    @(negedge clk); ib_valid = 0;
    ctrl = '0; ctrl.ldpc_take = 1;
    t = 0;
    do begin @(posedge clk); t++; end while (!stat.ldpc_done && t < 100);
    @(negedge clk); ctrl = '0;
    check(stat.ldpc_ok, "LDPC corrects single error");
    c = '0; c.drf_we = 1; c.drf_waddr = 4'd0; c.drf_wsel = 2'd0; step(c);
    c = '0; c.drf_we = 1; c.drf_waddr = 4'd1; c.drf_wsel = 2'd1; step(c);
    check(dut.u_drf.mem[0] == d[511:0], "Data RF row 0");
    check(dut.u_drf.mem[1] == {128'b0, d[895:512]}, "Data RF row 1");

    // ---- DRF -> CRF rows 4,5 ----
    for (int r = 0; r < 2; r++) begin
      c = '0; c.drf_raddr = 4'(r); @(negedge clk); ctrl = c;
      c.crf_we = 1; c.crf_waddr = 4'(4 + r); c.crf_wsel = 2'd1; @(negedge clk); ctrl = c;
      @(negedge clk); ctrl = '0;
    end
    check(dut.u_crf.mem[4] == d[511:0], "Cache RF row 4");
    check(dut.u_crf.mem[5] == {128'b0, d[895:512]}, "Cache RF row 5");

    // ---- CRF -> router -> BCE rows 0,1 ----
    for (int r = 0; r < 2; r++) begin
      c = '0; c.crf_raddr = 4'(4 + r); @(negedge clk); ctrl = c;
      c.rt_go = 1; c.rt_src = RT_CRF; c.rt_dst = RT_BCE; c.bce_row = 2'(r); @(negedge clk); ctrl = c;
      @(negedge clk); ctrl = '0;
    end
    // ---- one BCE op: rotate left 64 by 9 ----
    c = '0; c.bce_op_valid = 1; c.bce_op.ctrl.sel = SEL_SU; c.bce_op.ctrl.su = 6'd9;
    c.bce_op.ctrl.su_mode = '{w64: 1'b1, kind: SH_ROT, left: 1'b1};
    @(negedge clk); ctrl = c;
    @(posedge clk); check(stat.bce_op_ready, "BCE accepts op");
    @(negedge clk); ctrl = '0;
    t = 0;
    do begin @(posedge clk); t++; end while (!stat.bce_op_done && t < 20);
    check(t == 4, $sformatf("BCE op latency 4 (got %0d)", t));
    // ---- BCE -> OUT rows 2,3 -> host ----
    for (int r = 0; r < 2; r++) begin
      c = '0; c.rt_go = 1; c.rt_src = RT_BCE; c.rt_dst = RT_OUT; c.bce_row = 2'(r); c.out_row = 3'(2 + r);
      step(c);
    end
    c = '0; c.ho_start = 1; c.ho_row = 3'd2; c.ho_nrows = 4'd2; step(c);
    hout_ready = 1;
    while (hout_valid) begin @(posedge clk); got.push_back(hout_data); @(negedge clk); end
    hout_ready = 0;
    check(got.size() == 16, "host got two rows");
    for (int j = 0; j < 16 && j < got.size(); j++)
      check(got[j] == rotl64((j < 14) ? d[64*j +: 64] : 64'd0, 9), $sformatf("host word %0d", j));

    // ---- host -> OUT row 0 -> ACE row 3 -> OUT row 7 -> host ----
    ctrl = '0; c = '0; c.hi_clear = 1; step(c);
    c = '0; c.hi_open = 1; @(negedge clk); ctrl = c;
    for (int w = 0; w < 8; w++) begin
      row0[64*w +: 64] = {$urandom, $urandom};
      hin_valid = 1; hin_data = row0[64*w +: 64];
      @(posedge clk); check(hin_ready, "host word accepted while open"); @(negedge clk);
    end
    hin_valid = 0; ctrl = '0;
    hin_valid = 1; hin_data = 64'hdead;
    @(posedge clk); check(!hin_ready, "host held off while closed"); @(negedge clk); hin_valid = 0;
    check(stat.hi_rows == 4'd1, "one host row");
    c = '0; c.ace_wr_out = 1; c.out_row = 3'd0; c.ace_row = 2'd3; step(c);
    c = '0; c.out_we_ace = 1; c.out_row = 3'd7; c.ace_row = 2'd3; step(c);
    c = '0; c.ho_start = 1; c.ho_row = 3'd7; c.ho_nrows = 4'd1; step(c);
    got.delete(); hout_ready = 1;
    while (hout_valid) begin @(posedge clk); got.push_back(hout_data); @(negedge clk); end
    hout_ready = 0;
    check(got.size() == 8, "ACE row returned");
    for (int j = 0; j < 8 && j < got.size(); j++) check(got[j] == row0[64*j +: 64], "ACE round trip");

    // ---- key generation -> CRF row 15 ----
    c = '0; c.kge_start = 1; step(c);
    t = 0;
    do begin @(posedge clk); t++; end while (!stat.kge_done && t < 1000);
    key = {sha256_1blk({puf_key, salt, ctx, 32'd0, 8'h80, 24'd0, 64'd416}),
           sha256_1blk({puf_key, salt, ctx, 32'd1, 8'h80, 24'd0, 64'd416})};
    c = '0; c.crf_we = 1; c.crf_waddr = 4'd15; c.crf_wsel = 2'd2; step(c);
    check(dut.u_crf.mem[15] == key, "derived key in Cache RF row 15");

    // ---- DRF rows 0,1 -> outbound FIFO -> 64-bit words ----
    got.delete();
    row1 = {128'b0, d[895:512]};
    for (int r = 0; r < 2; r++) begin
      c = '0; c.drf_raddr = 4'(r); @(negedge clk); ctrl = c;
      c.ob_push = 1; @(negedge clk); ctrl = c;
      @(negedge clk); ctrl = '0;
    end
    @(negedge clk); ob_ready_in = 1;
    repeat (20) begin @(posedge clk); if (ob_valid) got.push_back(ob_data); end
    check(got.size() == 16, "outbound 16 words");
    for (int j = 0; j < 16 && j < got.size(); j++)
      check(got[j] == ((j < 8) ? d[64*j +: 64] : row1[64*(j-8) +: 64]), "outbound word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
