// tb_flashvault_top: end-to-end test of a FlashVault die at its default size
// (4 planes, 2 engines, 4 KB pages).
//
// Behavioural stand-ins surround the die: a memory array per plane (streams a
// stored page on sense_req with random gaps, captures a programmed page on
// prog_req with random back-pressure), a host that drains and fills the
// output registers with random stalls, and a constant PUF root key.
// The test programs a BCE micro-program (two 64-bit rotations and a key
// select), then runs key generation on both engines, two page reads (one with
// single-bit errors in a third of the codewords, one through the key-select
// step on the other engine and another plane), a cache read of two pages
// (the second sensed while the first is transferred), one page program, ACE
// load / add / XOR / store, and delivery of a derived key into the ACE. Every host word and every programmed array word
// is compared with a model computed here: an LDPC encoder written from the
// parity equations, SHA-256 for the derived keys, and plain arithmetic for
// the BCE and ACE operations. Each mechanism is counted and a failure is
// recorded for any that never happened.
module tb_flashvault_top;
  import fv_pkg::*;

  localparam int NP = 4, NE = 2, NW = 2048, NCW = 32, Z = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         cmd_valid = 0, cmd_ready, cmd_done, cmd_err;
  cmd_t         cmd = '0;
  logic         uop_we = 0;
  logic [3:0]   uop_addr = 0;
  bce_op_t      uop_data = '0;
  bce_cfg_t     bce_cfg = '0;
  logic         ace_cfg_we = 0;
  logic [3:0]   ace_cfg_addr = 0;
  logic [63:0]  ace_cfg_data = 0;
  logic         host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 0;
  logic [63:0]  host_in_data = 0, host_out_data;
  logic [255:0] puf_key;
  logic [NP-1:0] sense_req, prog_req, arr_in_valid = 0, arr_out_valid, arr_out_ready = 0;
  logic [15:0]  arr_in_data [NP];
  logic [15:0]  arr_out_data [NP];

  flashvault_top dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done, .cmd_err,
    .uop_we, .uop_addr, .uop_data, .bce_cfg, .ace_cfg_we, .ace_cfg_addr, .ace_cfg_data,
    .host_in_valid, .host_in_ready, .host_in_data, .host_out_valid, .host_out_ready, .host_out_data,
    .puf_key, .sense_req, .prog_req, .arr_in_valid, .arr_in_data, .arr_out_valid, .arr_out_ready,
    .arr_out_data);

  int checks = 0, failures = 0;
  int n_read = 0, n_prog = 0, n_keygen = 0, n_ace = 0, n_corr = 0, n_host_stall = 0, n_host_in_stall = 0;
  int n_ob_stall = 0, n_arr_gap = 0, n_uop = 0, n_planes_read = 0;
  logic [NE-1:0] eng_used = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- SHA-256 reference ----------------
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
  function automatic logic [511:0] derive_key(logic [63:0] salt, logic [63:0] ctx);
    logic [511:0] key;
    for (int c = 0; c < 2; c++)
      key[511 - 256*c -: 256] = sha256_1blk({puf_key, salt, ctx, 32'(c), 8'h80, 24'd0, 64'd416});
    return key;
  endfunction

  // ---------------- LDPC encoder reference ----------------
  function automatic logic [1023:0] ldpc_encode(logic [895:0] d);
    logic [1023:0] cw;
    cw = '0;
    cw[895:0] = d;
    for (int r = 0; r < Z; r++)
      for (int c = 0; c < 14; c++) begin
        cw[896 + r]      ^= d[c*Z + r];
        cw[896 + Z + r]  ^= d[c*Z + (r + c) % Z];
      end
    return cw;
  endfunction

  function automatic logic [63:0] rotl64(logic [63:0] x, int n);
    return (x << n) | (x >> (64 - n));
  endfunction

  // ---------------- memory array model ----------------
  logic [15:0] page [NP][2][NW];   // two stored pages per plane, used alternately
  bit          sel [NP];
  logic [15:0] prog_page [NP][NW];
  int          prog_cnt [NP];
  for (genvar p = 0; p < NP; p++) begin : g_arr
    int sp = NW;
    assign arr_in_data[p] = page[p][sel[p]][sp % NW];
    always @(posedge clk) begin
      if (sense_req[p]) begin sp <= 0; sel[p] <= !sel[p]; end
      else if (arr_in_valid[p]) sp <= sp + 1;
      if (prog_req[p]) prog_cnt[p] <= 0;
      else if (arr_out_valid[p] && arr_out_ready[p]) begin
        prog_page[p][prog_cnt[p] % NW] <= arr_out_data[p];
        prog_cnt[p] <= prog_cnt[p] + 1;
      end
    end
    always @(negedge clk) begin
      arr_in_valid[p]  <= (sp < NW) && !sense_req[p] && (($urandom % 8) != 0);
      arr_out_ready[p] <= ($urandom % 4) != 0;
      if (sp < NW && arr_in_valid[p] == 0) n_arr_gap++;
    end
  end

  // ---------------- host model ----------------
  logic [63:0] hin_q [$];
  logic [63:0] hout_q [$];
  always @(negedge clk) begin
    host_out_ready <= ($urandom % 3) != 0;
    if (hin_q.size() > 0 && ($urandom % 4) != 0) begin
      host_in_valid <= 1; host_in_data <= hin_q[0];
    end else host_in_valid <= 0;
  end
  always @(posedge clk) begin
    if (host_out_valid && host_out_ready) hout_q.push_back(host_out_data);
    if (host_out_valid && !host_out_ready) n_host_stall++;
    if (host_in_valid && !host_in_ready) n_host_in_stall++;
    if (host_in_valid && host_in_ready) void'(hin_q.pop_front());
  end

  // outbound FIFO full while a program pushes rows
  always @(posedge clk)
    for (int e = 0; e < NE; e++) begin
      if (e == 0 && !dut.g_eng[0].u_eng.stat.ob_ready) n_ob_stall++;
      if (e == 1 && !dut.g_eng[1].u_eng.stat.ob_ready) n_ob_stall++;
    end
  always @(posedge clk) begin
    if (dut.g_eng[0].u_eng.stat.bce_op_done) n_uop++;
    if (dut.g_eng[1].u_eng.stat.bce_op_done) n_uop++;
  end

  task automatic run(cmd_t c, output logic err);
    @(negedge clk); cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
    do @(posedge clk); while (!cmd_done);
    err = cmd_err;
    eng_used[c.eng] = 1'b1;
  endtask

  // page contents for a read: random data, optional single-bit errors
  task automatic load_page(int pl, bit slot, bit inject, output logic [895:0] pd [NCW], output bit fl [NCW]);
    for (int w = 0; w < NCW; w++) begin
      logic [1023:0] cw;
      for (int b = 0; b < 28; b++) pd[w][32*b +: 32] = $urandom;
      cw = ldpc_encode(pd[w]);
      fl[w] = inject && (w % 3 == 0);
      if (fl[w]) begin
        int fb;
        fb = int'($urandom % 1024);
        cw[fb] = !cw[fb];
      end
      for (int k = 0; k < 64; k++) page[pl][slot][w*64 + k] = cw[16*k +: 16];
    end
  endtask

  // host words of a read against the model
  task automatic check_read(string tag, logic [895:0] pd [NCW], bit fl [NCW], bit keysel, logic [511:0] k);
    check(hout_q.size() == NCW * 16, {tag, ": 16 words per codeword"});
    for (int w = 0; w < NCW; w++) begin
      bit ok;
      ok = 1;
      for (int j = 0; j < 16; j++) begin
        logic [63:0] exp, got;
        exp = (j < 14) ? pd[w][64*j +: 64] : 64'd0;
        exp = rotl64(exp, ROT_A + ROT_B);
        if (keysel) exp = {24'd0, k[32*j +: 8], 24'd0, exp[7:0]};
        got = (hout_q.size() > w*16 + j) ? hout_q[w*16 + j] : 64'd0;
        if (got != exp) ok = 0;
      end
      check(ok, $sformatf("%s codeword %0d", tag, w));
      if (ok && fl[w]) n_corr++;
    end
  endtask

  // sensing of the next page while the engine works on the current one
  int n_overlap = 0;
  always @(posedge clk) if (dut.u_cu.sensing[0] && host_out_valid) n_overlap++;

  // ---------------- test ----------------
  localparam int ROT_A = 13, ROT_B = 22;
  logic [511:0] key [NE];
  logic [895:0] pdata [NCW], pdata2 [NCW];
  bit           flipped [NCW], flipped2 [NCW];
  logic         err;
  cmd_t         c;
  logic [63:0]  hdata [512];
  logic [63:0]  arow [2][8];

  initial begin
    puf_key = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // micro-program
    for (int i = 0; i < 3; i++) begin
      bce_op_t o;
      o = '0;
      case (i)
        0: begin o.ctrl.sel = SEL_SU; o.ctrl.su = 6'(ROT_A); o.ctrl.su_mode = '{w64: 1'b1, kind: SH_ROT, left: 1'b1}; end
        1: begin o.ctrl.sel = SEL_SU; o.ctrl.su = 6'(ROT_B); o.ctrl.su_mode = '{w64: 1'b1, kind: SH_ROT, left: 1'b1}; end
        default: begin o.ctrl.sel = SEL_LOU; o.ctrl.loc = {1'b0, 2'd3, 6'b0}; o.key_in1 = 1'b1; end
      endcase
      @(negedge clk); uop_we = 1; uop_addr = 4'(i); uop_data = o;
    end
    @(negedge clk); uop_we = 0;

    // ---- key generation on both engines ----
    for (int e = 0; e < NE; e++) begin
      c = '0; c.op = CMD_KEYGEN; c.eng = 1'(e);
      c.salt = {$urandom, $urandom}; c.context_w = {$urandom, $urandom};
      key[e] = derive_key(c.salt, c.context_w);
      run(c, err);
      n_keygen++;
      if (e == 0) check(dut.g_eng[0].u_eng.u_crf.mem[15] == key[0], "key in Cache RF row 15 (engine 0)");
      else        check(dut.g_eng[1].u_eng.u_crf.mem[15] == key[1], "key in Cache RF row 15 (engine 1)");
    end

    // ---- two page reads on different planes and engines ----
    for (int t = 0; t < 2; t++) begin
      int pl;
      pl = (t == 0) ? 1 : 2;
      load_page(pl, !sel[pl], t == 0, pdata, flipped);
      hout_q.delete();
      c = '0; c.op = CMD_READ; c.plane = 2'(pl); c.eng = 1'(t); c.n_uop = (t == 0) ? 4'd2 : 4'd3;
      run(c, err);
      n_read++;
      check(!err, "read reports no uncorrectable codeword");
      check_read($sformatf("read %0d", t), pdata, flipped, t == 1, key[1]);
    end

    // ---- cache read: two pages of plane 0, the second sensed during the first ----
    load_page(0, !sel[0], 1'b0, pdata, flipped);
    load_page(0, sel[0], 1'b1, pdata2, flipped2);
    hout_q.delete();
    c = '0; c.op = CMD_READ; c.plane = 2'd0; c.eng = 1'b0; c.n_uop = 4'd2; c.next_sense = 1'b1;
    run(c, err);
    n_read++;
    check_read("cache read 0", pdata, flipped, 1'b0, key[0]);
    hout_q.delete();
    c = '0; c.op = CMD_READ; c.plane = 2'd0; c.eng = 1'b0; c.n_uop = 4'd2; c.presensed = 1'b1;
    run(c, err);
    n_read++;
    check(!err, "cache read reports no uncorrectable codeword");
    check_read("cache read 1", pdata2, flipped2, 1'b0, key[0]);

    // ---- page program ----
    for (int i = 0; i < 512; i++) begin hdata[i] = {$urandom, $urandom}; hin_q.push_back(hdata[i]); end
    c = '0; c.op = CMD_PROGRAM; c.plane = 2'd3; c.eng = 1'b0; c.n_uop = 4'd2;
    run(c, err);
    n_prog++;
    check(hin_q.size() == 0, "program consumed all host words");
    check(prog_cnt[3] == NW, "array received a full page");
    for (int i = 0; i < 512; i++) begin
      logic [63:0] exp, got;
      exp = rotl64(hdata[i], ROT_A + ROT_B);
      got = {prog_page[3][4*i + 3], prog_page[3][4*i + 2], prog_page[3][4*i + 1], prog_page[3][4*i]};
      check(got == exp, $sformatf("programmed word %0d", i));
    end

    // ---- ACE: load two rows, add and XOR, store ----
    for (int r = 0; r < 2; r++) begin
      for (int j = 0; j < 8; j++) begin arow[r][j] = {$urandom, $urandom}; hin_q.push_back(arow[r][j]); end
      c = '0; c.op = CMD_ACE_LD; c.eng = 1'b1; c.ace_row = 2'(r);
      run(c, err); n_ace++;
    end
    c = '0; c.op = CMD_ACE_EX; c.eng = 1'b1;
    c.instr.unit = ACE_HASH; c.instr.row_a = 2'd0; c.instr.row_b = 2'd1; c.instr.row_d = 2'd2;
    c.instr.hctrl.sel = HU_ADD; c.instr.hctrl.add = HA_ADD64;
    run(c, err); n_ace++;
    c = '0; c.op = CMD_ACE_EX; c.eng = 1'b1;
    c.instr.unit = ACE_ALU; c.instr.opw = 7'd64; c.instr.actrl.op = AC_LOGIC; c.instr.actrl.lc = LC_XOR;
    c.instr.wa0 = 5'd0; c.instr.wb0 = 5'd8; c.instr.wd0 = 5'd24;
    c.instr.wa1 = 5'd1; c.instr.wb1 = 5'd9; c.instr.wd1 = 5'd25;
    run(c, err); n_ace++;
    for (int r = 2; r < 4; r++) begin
      hout_q.delete();
      c = '0; c.op = CMD_ACE_ST; c.eng = 1'b1; c.ace_row = 2'(r); c.row = 3'(r + 3);
      run(c, err); n_ace++;
      check(hout_q.size() == 8, "ACE store delivers one row");
      if (hout_q.size() == 8) begin
        if (r == 2)
          for (int j = 0; j < 8; j++) check(hout_q[j] == arow[0][j] + arow[1][j], "ACE hash-ALU add");
        else
          for (int j = 0; j < 2; j++) check(hout_q[j] == (arow[0][j] ^ arow[1][j]), "ACE ACALU xor");
      end
    end

    // ---- key delivery to the ACE ----
    c = '0; c.op = CMD_KEY_ACE; c.eng = 1'b1; c.ace_row = 2'd0;
    run(c, err); n_ace++;
    hout_q.delete();
    c = '0; c.op = CMD_ACE_ST; c.eng = 1'b1; c.ace_row = 2'd0; c.row = 3'd0;
    run(c, err); n_ace++;
    check(hout_q.size() == 8, "key row returned");
    for (int j = 0; j < 8 && j < hout_q.size(); j++) check(hout_q[j] == key[1][64*j +: 64], "key delivered to ACE");

    // ---- mechanisms ----
    $display("mechanisms: read=%0d program=%0d keygen=%0d ace=%0d ldpc_corrected=%0d uops=%0d sense_overlap=%0d",
             n_read, n_prog, n_keygen, n_ace, n_corr, n_uop, n_overlap);
    $display("            host_out_stall=%0d host_in_stall=%0d ob_fifo_full=%0d array_gaps=%0d engines=%b",
             n_host_stall, n_host_in_stall, n_ob_stall, n_arr_gap, eng_used);
    check(n_read == 4, "page reads happened");
    check(n_overlap > 0, "sensing overlapped with host transfer (cache read)");
    check(n_prog == 1, "page program happened");
    check(n_keygen == 2, "key generation happened");
    check(n_ace == 8, "ACE commands happened");
    check(n_corr > 0, "LDPC correction happened");
    check(n_uop > 0, "BCE micro-operations happened");
    check(n_host_stall > 0, "host output back-pressure happened");
    check(n_host_in_stall > 0, "host input held off happened");
    check(n_ob_stall > 0, "outbound FIFO full happened");
    check(n_arr_gap > 0, "array stream gaps happened");
    check(eng_used == 2'b11, "both engines used");
    $display("cycles: %0d", $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
