// tb_nearpm_workloads: the three crash-consistency mechanisms as the
// evaluated applications use them, run on the two-device top at its default
// sizes with a 131-cycle PM model behind each device.
//   * Undo logging (key-value inserts with 64 B values, as in the B-tree,
//     hash-map and similar benchmarks): each transaction logs a 128 B object
//     interleaved over both devices (64 B on each) with a duplicated command,
//     the host overwrites the object at once, and a duplicated commit deletes
//     the log; 16 transactions are issued back to back.
//   * Checkpointing at 4 kB page granularity: 4 pages are checkpointed on
//     device 0 and the host writes into each page right after.
//   * Shadow paging at 4 kB page granularity: 4 pages are copied on device 1
//     and the host writes into each new copy right after.
// Checks the PM contents after each phase (old data in logs and checkpoints,
// host data in place, logs deleted), and reports cycles per transaction and
// per page. Expected values come from the test's own copies of the data.
module tb_nearpm_workloads;
  import nearpm_pkg::*;
  localparam int ND = 2, NU = 4, LAT = 131, NTX = 16, NPG = 4;
  localparam addr_t VBASE = 64'h7f00_0000_0000, PBASE = 64'h4000_0000;
  localparam addr_t OBJ = 64'h1_0000, LOG = 64'h8_0000, PG = 64'h10_0000, CK = 64'h20_0000, SH = 64'h30_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [ND-1:0] cmd_valid, cmd_ready, host_valid, host_ready, host_rsp_valid;
  logic [ND-1:0] pm_req_valid, pm_req_ready, pm_rsp_valid, all_complete, amt_full;
  req_t cmd_req [ND]; host_acc_t host_acc [ND]; line_t host_rsp_rdata [ND];
  mem_req_t pm_req [ND]; line_t pm_rsp_rdata [ND];
  logic [ND-1:0] sync_state [ND][NU]; logic [NU-1:0] units_busy [ND];
  logic [31:0] n_issued [ND], n_stall_conflict [ND], n_stall_host [ND], n_stall_unit [ND];
  logic [31:0] n_host_blocked [ND], n_set_pool [ND];

  nearpm_system dut (.*);
  pm_mem_model #(.LATENCY(LAT)) pm0 (.clk, .rst_n, .req_valid(pm_req_valid[0]), .req_ready(pm_req_ready[0]),
    .req(pm_req[0]), .rsp_valid(pm_rsp_valid[0]), .rsp_rdata(pm_rsp_rdata[0]));
  pm_mem_model #(.LATENCY(LAT)) pm1 (.clk, .rst_n, .req_valid(pm_req_valid[1]), .req_ready(pm_req_ready[1]),
    .req(pm_req[1]), .rsp_valid(pm_rsp_valid[1]), .rsp_rdata(pm_rsp_rdata[1]));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic line_t peek(int d, addr_t a);
    return d == 0 ? pm0.peek(PBASE + a) : pm1.peek(PBASE + a);
  endfunction
  function automatic void poke(int d, addr_t a, line_t v);
    if (d == 0) pm0.poke(PBASE + a, v); else pm1.poke(PBASE + a, v);
  endfunction
  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction
  function automatic req_t cmd(op_e op, addr_t s, addr_t d, int sz, int tag, logic dup);
    req_t r = '0;
    r.op = op; r.src = VBASE + s; r.dst = VBASE + d; r.size = sz; r.tag = 16'(tag); r.pool_id = 8'd1;
    r.flags = dup ? FLAG_DUP : 8'h0;
    return r;
  endfunction

  // per-device stream of commands and host writes in program order: an item
  // is offered only after the one before it has been accepted
  typedef struct { logic is_cmd; req_t r; host_acc_t h; } item_t;
  item_t sq [ND][$];
  for (genvar d = 0; d < ND; d++) begin : g_drv
    always @(negedge clk) begin
      if (!rst_n) begin cmd_valid[d] = 0; host_valid[d] = 0; end
      else begin
        if ((cmd_valid[d] && cmd_ready[d]) || (host_valid[d] && host_ready[d])) void'(sq[d].pop_front());
        cmd_valid[d] = sq[d].size() > 0 && sq[d][0].is_cmd;
        host_valid[d] = sq[d].size() > 0 && !sq[d][0].is_cmd;
        if (cmd_valid[d]) cmd_req[d] = sq[d][0].r;
        if (host_valid[d]) host_acc[d] = sq[d][0].h;
      end
    end
  end
  task automatic cmd_to(int d, req_t r);
    item_t it; it.is_cmd = 1; it.r = r; it.h = '0; sq[d].push_back(it);
  endtask
  task automatic hwr(int d, addr_t a, line_t v);
    item_t it; it.is_cmd = 0; it.r = '0; it.h.we = 1; it.h.addr = PBASE + a; it.h.data = v; sq[d].push_back(it);
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (sq[0].size() != 0 || sq[1].size() != 0 || cmd_valid != 0 || host_valid != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    while (!(&all_complete) || dut.g_dev[0].u_dev.f_count != 0 || dut.g_dev[1].u_dev.f_count != 0 ||
           units_busy[0] != 0 || units_busy[1] != 0) @(negedge clk);
    repeat (2 * LAT + 10) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    line_t oldv [ND][NTX], newv [ND][NTX], pg [NPG][64], hv [NPG];
    log_hdr_t h;
    longint t0, t1;
    int bad;
    for (int d = 0; d < ND; d++) begin cmd_req[d] = '0; host_acc[d] = '0; end
    cmd_valid = '0; host_valid = '0;
    repeat (4) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    for (int d = 0; d < ND; d++) begin
      automatic req_t r = '0; r.op = OP_SET_POOL; r.pool_id = 1; r.src = PBASE - VBASE; cmd_to(d, r);
    end
    wait_idle();

    // undo logging: 16 insert transactions, 64 B per device each
    for (int d = 0; d < ND; d++) for (int t = 0; t < NTX; t++) begin
      oldv[d][t] = rnd_line(); newv[d][t] = rnd_line(); poke(d, OBJ + 64 * t, oldv[d][t]);
    end
    t0 = longint'($time / 10);
    for (int t = 0; t < NTX; t++) begin
      for (int d = 0; d < ND; d++) begin
        cmd_to(d, cmd(OP_UNDOLOG_CREATE, OBJ + 64 * t, LOG + 128 * t, 64, t, 1));
        hwr(d, OBJ + 64 * t, newv[d][t]);
        cmd_to(d, cmd(OP_COMMIT_LOG, 0, LOG + 128 * t, 128, 64 + t, 1));
      end
    end
    wait_idle();
    t1 = longint'($time / 10) - 2 * LAT - 10 - t0;
    $display("undo logging: %0d transactions in %0d cycles (%0d per transaction)", NTX, t1, t1 / longint'(NTX));
    for (int d = 0; d < ND; d++) begin
      bad = 0;
      for (int t = 0; t < NTX; t++) begin
        h = log_hdr_t'(peek(d, LOG + 128 * t));
        if (peek(d, OBJ + 64 * t) != newv[d][t]) bad++;
        if (peek(d, LOG + 128 * t + 64) != oldv[d][t]) bad++;
        if (h.magic != HDR_MAGIC || h.valid || !h.committed || h.obj_addr != PBASE + OBJ + 64 * t) bad++;
      end
      chk(bad == 0, $sformatf("dev%0d undo logging: %0d mismatches", d, bad));
    end
    chk(n_host_blocked[0] > 0 && n_host_blocked[1] > 0, "host updates waited for their logs");

    // checkpointing: 4 pages on device 0, host writes line 5 of each page
    for (int p = 0; p < NPG; p++) begin
      for (int i = 0; i < 64; i++) begin pg[p][i] = rnd_line(); poke(0, PG + 4096 * p + 64 * i, pg[p][i]); end
      hv[p] = rnd_line();
    end
    t0 = longint'($time / 10);
    for (int p = 0; p < NPG; p++) begin
      cmd_to(0, cmd(OP_CKPOINT_CREATE, PG + 4096 * p, CK + 8192 * p, 4096, 200 + p, 0));
      hwr(0, PG + 4096 * p + 64 * 5, hv[p]);
    end
    wait_idle();
    t1 = longint'($time / 10) - 2 * LAT - 10 - t0;
    $display("checkpointing: %0d pages in %0d cycles (%0d per page)", NPG, t1, t1 / longint'(NPG));
    bad = 0;
    for (int p = 0; p < NPG; p++) begin
      for (int i = 0; i < 64; i++) begin
        if (peek(0, CK + 8192 * p + 64 + 64 * i) != pg[p][i]) bad++;
        if (peek(0, PG + 4096 * p + 64 * i) != (i == 5 ? hv[p] : pg[p][i])) bad++;
      end
      h = log_hdr_t'(peek(0, CK + 8192 * p));
      if (!h.valid || h.size != 4096) bad++;
    end
    chk(bad == 0, $sformatf("checkpointing: %0d mismatches", bad));

    // shadow paging: 4 pages on device 1, host writes line 9 of each new copy
    for (int p = 0; p < NPG; p++) begin
      for (int i = 0; i < 64; i++) begin pg[p][i] = rnd_line(); poke(1, PG + 4096 * p + 64 * i, pg[p][i]); end
      hv[p] = rnd_line();
    end
    t0 = longint'($time / 10);
    for (int p = 0; p < NPG; p++) begin
      cmd_to(1, cmd(OP_SHADOWCPY, PG + 4096 * p, SH + 4096 * p, 4096, 210 + p, 0));
      hwr(1, SH + 4096 * p + 64 * 9, hv[p]);
    end
    wait_idle();
    t1 = longint'($time / 10) - 2 * LAT - 10 - t0;
    $display("shadow paging: %0d pages in %0d cycles (%0d per page)", NPG, t1, t1 / longint'(NPG));
    bad = 0;
    for (int p = 0; p < NPG; p++) for (int i = 0; i < 64; i++)
      if (peek(1, SH + 4096 * p + 64 * i) != (i == 9 ? hv[p] : pg[p][i])) bad++;
    chk(bad == 0, $sformatf("shadow paging: %0d mismatches", bad));
    // pages run on four units in parallel: well under four serial copies
    chk(t1 < 4 * 8 * (2 * 8 + 2 * LAT), $sformatf("shadow pages overlap on the units (%0d cycles)", t1));
    chk(amt_full == 0, "translation table not full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
