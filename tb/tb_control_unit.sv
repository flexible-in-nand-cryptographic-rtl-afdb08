// tb_control_unit: runs every command through the control FSM against
// reactive stand-ins for the engines and planes, and checks the sequence of
// control events it produces.
//
// The page is reduced to 256 bytes (2 codewords, 1 BCE chunk, 128 array
// words) to keep the test short. Stand-ins: array streams after sense_req
// and takes words after prog_req, plane copies stay busy a few cycles, the
// LDPC decoder answers after 3 cycles (ok or not, as chosen), the BCE
// finishes 4 cycles after accepting, the host fills rows and drains reads
// with delays, the outbound FIFO refuses pushes at random. For each command
// the test counts the events (stream starts, decoder hand-offs, register-file
// writes, router moves, micro-operations, pushes, copies) and compares them
// with what the command must cause, and checks cmd_err and the micro-program
// words presented to the engine.
// Cache reads (next_sense / presensed) and key delivery to the ACE are
// covered as well.
module tb_control_unit;
  import fv_pkg::*;

  localparam int PB = 256, NW = PB / 2, NCW = PB / 128, NCH = PB / 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      cmd_valid = 0, cmd_ready, cmd_done, cmd_err;
  cmd_t      cmd = '0, cur;
  logic      uop_we = 0;
  logic [3:0] uop_addr = 0;
  bce_op_t   uop_data = '0;
  eng_ctrl_t ec [2];
  eng_stat_t es [2];
  logic [3:0] arr_rst, sense_req, prog_req, arr_in_valid = 0, arr_out_fire = 0, cp_p2c, cp_c2p;
  logic [3:0] pl_busy = 0, io_rd_start, io_wr_start;
  logic [$clog2(PB/8+1)-1:0] io_base, io_len;

  control_unit #(.N_PLANE(4), .N_ENG(2), .PAGE_BYTES(PB), .N_UOP(16)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done, .cmd_err, .cur_cmd(cur),
    .uop_we, .uop_addr, .uop_data, .eng_ctrl(ec), .eng_stat(es),
    .arr_rst, .sense_req, .prog_req, .arr_in_valid, .arr_out_fire, .cp_p2c, .cp_c2p, .pl_busy,
    .io_rd_start, .io_wr_start, .io_base, .io_len);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- stand-ins ----------------
  bit   ldpc_ok_sel = 1;
  int   arr_left = 0, prog_left = 0, busy_left = 0, ldpc_t = -1, ho_t = 0, kge_t = -1;
  int   bce_t = -1, hi_words = 0;
  logic ace_d = 0;
  eng_ctrl_t e;
  int   active;
  int   n_sense, n_rdstart, n_take, n_drf, n_crf, n_rt [4][4], n_uop_ok, n_hostart, n_push, n_p2c, n_c2p,
        n_prog, n_kge, n_ace, n_wrstart, n_key, n_ace_ld, n_ace_st, n_uop_bad;
  bce_op_t uops [16];

  always_comb begin
    for (int k = 0; k < 2; k++) es[k] = '0;
    es[active].ldpc_done    = (ldpc_t == 0);
    es[active].ldpc_ok      = ldpc_ok_sel;
    es[active].bce_op_ready = (bce_t < 0);
    es[active].bce_op_done  = (bce_t == 0);
    es[active].ace_done     = ace_d;
    es[active].kge_done     = (kge_t == 0);
    es[active].ob_ready     = ($urandom % 3) != 0;
    es[active].ob_empty     = 1'b1;
    es[active].hi_rows      = 4'(hi_words / 8);
    es[active].ho_busy      = (ho_t > 0);
  end
  assign active = int'(cur.eng);
  assign e = ec[active];

  always @(posedge clk) begin
    // plane side
    if (sense_req != 0) begin arr_left <= NW; n_sense++; end
    else if (arr_left > 0 && ($urandom % 2)) begin arr_in_valid <= 4'b1 << cur.plane; arr_left <= arr_left - 1; end
    else arr_in_valid <= 0;
    if (prog_req != 0) begin prog_left <= NW; n_prog++; end
    else if (prog_left > 0 && ($urandom % 2)) begin arr_out_fire <= 4'b1 << cur.plane; prog_left <= prog_left - 1; end
    else arr_out_fire <= 0;
    if (cp_p2c != 0 || cp_c2p != 0) begin busy_left <= 5; pl_busy <= 4'b1 << cur.plane; end
    else if (busy_left > 1) busy_left <= busy_left - 1;
    else begin busy_left <= 0; pl_busy <= 0; end
    n_p2c += int'(cp_p2c != 0); n_c2p += int'(cp_c2p != 0);
    n_rdstart += int'(io_rd_start != 0); n_wrstart += int'(io_wr_start != 0);
    if (io_rd_start != 0) check(io_len == 16 && int'(io_base) == 16 * (n_rdstart - 1), "codeword window");
    // engine side
    if (e.ldpc_take && ldpc_t < 0) begin ldpc_t <= 3; n_take++; end
    else if (ldpc_t >= 0) ldpc_t <= ldpc_t - 1;
    if (e.bce_op_valid && bce_t < 0) begin
      bce_t <= 4;
      if (e.bce_op == uops[dut.u[3:0]]) n_uop_ok++; else n_uop_bad++;
    end else if (bce_t >= 0) bce_t <= bce_t - 1;
    if (e.ho_start) begin ho_t <= 6; n_hostart++; end else if (ho_t > 0) ho_t <= ho_t - 1;
    if (e.kge_start) begin kge_t <= 10; n_kge++; end else if (kge_t >= 0) kge_t <= kge_t - 1;
    ace_d <= e.ace_valid; n_ace += int'(e.ace_valid);
    if (e.hi_clear) hi_words <= 0;
    else if (e.hi_open && ($urandom % 2)) hi_words <= hi_words + 1;
    n_drf += int'(e.drf_we); n_crf += int'(e.crf_we);
    if (e.rt_go) n_rt[e.rt_src][e.rt_dst]++;
    n_push += int'(e.ob_push);
    n_key += int'(e.rt_go && e.bce_key);
    n_ace_ld += int'(e.ace_wr_out); n_ace_st += int'(e.out_we_ace);
    if (e.ob_push) check(es[active].ob_ready, "push only when FIFO ready");
  end

  task automatic clear();
    n_sense = 0; n_rdstart = 0; n_take = 0; n_drf = 0; n_crf = 0; n_uop_ok = 0; n_hostart = 0;
    n_push = 0; n_p2c = 0; n_c2p = 0; n_prog = 0; n_kge = 0; n_ace = 0; n_wrstart = 0; n_key = 0;
    n_ace_ld = 0; n_ace_st = 0; n_uop_bad = 0;
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) n_rt[a][b] = 0;
  endtask

  task automatic run(cmd_t c, output logic err);
    int t;
    clear();
    @(negedge clk); cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
    t = 0;
    do begin @(posedge clk); t++; end while (!cmd_done && t < 50000);
    err = cmd_err;
    check(cmd_done, "command completes");
    @(negedge clk);
  endtask

  cmd_t c;
  logic err;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      uops[i] = bce_op_t'({$urandom, $urandom});
      @(negedge clk); uop_we = 1; uop_addr = 4'(i); uop_data = uops[i];
    end
    @(negedge clk); uop_we = 0;

    // READ, 3 micro-operations, engine 1, plane 2
    c = '0; c.op = CMD_READ; c.eng = 1'b1; c.plane = 2'd2; c.n_uop = 4'd3;
    run(c, err);
    check(!err, "read without error");
    check(n_sense == 1 && n_p2c == 1, "one sense and one page->cache copy");
    check(n_rdstart == NCW && n_take == NCW, "one stream and one decode per codeword");
    check(n_drf == 2 * NCW && n_crf == 2 * NCW, "two DRF and two CRF rows per codeword");
    check(n_rt[RT_CRF][RT_BCE] == 2 * NCW && n_rt[RT_BCE][RT_OUT] == 2 * NCW, "router moves");
    check(n_uop_ok == 3 * NCW && n_uop_bad == 0, $sformatf("micro-ops issued in order (%0d)", n_uop_ok));
    check(n_hostart == NCW, "one host read per codeword");

    // READ with n_uop = 0 (all 16) and a decoder failure
    ldpc_ok_sel = 0;
    c = '0; c.op = CMD_READ; c.eng = 1'b0; c.plane = 2'd0; c.n_uop = 4'd0;
    run(c, err);
    ldpc_ok_sel = 1;
    check(err, "decoder failure reported");
    check(n_uop_ok == 16 * NCW, "n_uop 0 runs 16 operations");

    // cache read: the second page is sensed during the first read
    c = '0; c.op = CMD_READ; c.eng = 1'b0; c.plane = 2'd1; c.n_uop = 4'd1; c.next_sense = 1'b1;
    run(c, err);
    check(n_sense == 2 && n_p2c == 1, "read with next_sense requests the next page");
    c = '0; c.op = CMD_READ; c.eng = 1'b0; c.plane = 2'd1; c.n_uop = 4'd1; c.presensed = 1'b1;
    run(c, err);
    check(n_sense == 0 && n_p2c == 1 && n_rdstart == NCW, "presensed read skips sensing");

    // PROGRAM
    c = '0; c.op = CMD_PROGRAM; c.eng = 1'b0; c.plane = 2'd3; c.n_uop = 4'd2;
    run(c, err);
    check(n_wrstart == 1, "cache write window opened once");
    check(n_rt[RT_OUT][RT_BCE] == 4 * NCH && n_rt[RT_BCE][RT_CRF] == 4 * NCH, "program router moves");
    check(n_drf == 4 * NCH && n_push == 4 * NCH, "four rows pushed per chunk");
    check(n_uop_ok == 2 * NCH, "program micro-ops");
    check(n_c2p == 1 && n_prog == 1, "cache->page copy and array program");

    // KEYGEN
    c = '0; c.op = CMD_KEYGEN; c.eng = 1'b1;
    run(c, err);
    check(n_kge == 1 && n_crf == 1 && n_key == 1, "key generated, stored and loaded");

    // ACE
    c = '0; c.op = CMD_ACE_LD; c.eng = 1'b1; c.ace_row = 2'd2;
    run(c, err);
    check(n_ace_ld == 1, "ACE row loaded");
    c = '0; c.op = CMD_ACE_EX; c.eng = 1'b1;
    run(c, err);
    check(n_ace == 1, "ACE instruction issued");
    c = '0; c.op = CMD_ACE_ST; c.eng = 1'b1; c.row = 3'd5;
    run(c, err);
    check(n_ace_st == 1 && n_hostart == 1, "ACE row stored and sent");

    c = '0; c.op = CMD_KEY_ACE; c.eng = 1'b0; c.ace_row = 2'd1;
    run(c, err);
    check(n_rt[RT_CRF][RT_ACE] == 1, "key row routed to the ACE");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
