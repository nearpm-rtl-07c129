// tb_nearpm_system: end-to-end test of the two-device NearPM system at its
// default sizes, each device backed by a PM model with the paper's 436 ns
// (131 cycles at 300 MHz) latency. The scenario follows the paper's example
// flow: pools are registered, a duplicated undo-log command runs on both
// devices while the host writes to the logged object, a commit deletes the
// logs, a checkpoint reaches one device long after the other has finished it,
// a burst of shadow copies exceeds the four units, and an apply-log copies a
// redo log back. Data are checked in PM after translation. The test counts
// every mechanism (command held by an in-flight conflict, by an older host
// access, by a full set of units; host access held back; the E/L/R/C sync
// states; a remote completion that arrives before the command is issued) and
// counts a failure for any mechanism that never occurred. The latency of a
// single-line undo log on an idle device is checked against three PM round
// trips (read old data, write copy, write header).
module tb_nearpm_system;
  import nearpm_pkg::*;
  localparam int ND = 2, NU = 4, LAT = 131;
  localparam addr_t VBASE = 64'h7f00_0000_0000, PBASE = 64'h4000_0000;
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
    return d == 0 ? pm0.peek(a) : pm1.peek(a);
  endfunction
  function automatic void poke(int d, addr_t a, line_t v);
    if (d == 0) pm0.poke(a, v); else pm1.poke(a, v);
  endfunction
  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  // mechanism counters from the sync states, seen from each device
  int n_E, n_L, n_R, n_C, n_early;
  logic [ND-1:0] prev [ND][NU];
  always @(posedge clk) begin
    if (!rst_n) begin
      n_E = 0; n_L = 0; n_R = 0; n_C = 0; n_early = 0;
      for (int d = 0; d < ND; d++) for (int u = 0; u < NU; u++) prev[d][u] = '1;
    end else for (int d = 0; d < ND; d++) for (int u = 0; u < NU; u++) begin
      logic [ND-1:0] s; s = sync_state[d][u];
      if (s != prev[d][u]) begin
        logic loc, rem; loc = s[d]; rem = s[1-d];
        // L and R are counted only when reached from E: a command that is
        // not duplicated starts directly in R (no remote part to wait for)
        if (!loc && !rem) n_E++;
        else if (loc && !rem) begin if (prev[d][u] == '0) n_L++; end
        else if (!loc && rem) begin if (prev[d][u] == '0) n_R++; end
        else n_C++;
      end
      prev[d][u] = s;
    end
    // a completion from device 1 remembered by device 0 before issue
    if (rst_n && dut.g_dev[0].u_dev.u_mdh.early_q[1] != '0) n_early++;
  end

  function automatic req_t cmd(op_e op, addr_t s, addr_t d, int sz, int tag, logic dup);
    req_t r = '0;
    r.op = op; r.src = s; r.dst = d; r.size = sz; r.tag = 16'(tag); r.pool_id = 8'd1; r.thread_id = 8'd3;
    r.flags = dup ? FLAG_DUP : 8'h0;
    return r;
  endfunction
  task automatic send(input int d, input req_t r);
    @(negedge clk);
    chk(cmd_ready[d], "command FIFO has room");
    cmd_valid[d] = 1; cmd_req[d] = r;
    @(negedge clk); cmd_valid[d] = 0;
  endtask
  task automatic hsend(input int d, input logic we, input addr_t a, input line_t v);
    @(negedge clk);
    chk(host_ready[d], "host queue has room");
    host_valid[d] = 1; host_acc[d].we = we; host_acc[d].addr = a; host_acc[d].data = v;
    @(negedge clk); host_valid[d] = 0;
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (!(&all_complete) || dut.g_dev[0].u_dev.f_count != 0 || dut.g_dev[1].u_dev.f_count != 0 ||
           units_busy[0] != 0 || units_busy[1] != 0) @(negedge clk);
    repeat (2 * LAT) @(negedge clk);
  endtask

  line_t host_rd [$];
  always @(posedge clk) if (rst_n && host_rsp_valid[0]) host_rd.push_back(host_rsp_rdata[0]);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    line_t obj [2][4], newv, cp [2][2], pg [64], redo [2];
    log_hdr_t h;
    longint t0, lat;
    cmd_valid = 0; host_valid = 0;
    for (int d = 0; d < ND; d++) begin cmd_req[d] = '0; host_acc[d] = '0; end
    for (int d = 0; d < ND; d++) for (int i = 0; i < 4; i++) begin
      obj[d][i] = rnd_line(); poke(d, PBASE + 64'h1000 + 64 * i, obj[d][i]);
    end
    repeat (4) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);

    // register pool 1 on both devices
    for (int d = 0; d < ND; d++) begin
      automatic req_t r = '0; r.op = OP_SET_POOL; r.pool_id = 1; r.thread_id = 3; r.src = PBASE - VBASE; send(d, r);
    end
    repeat (4) @(posedge clk);
    chk(n_set_pool[0] == 1 && n_set_pool[1] == 1, "pools registered");

    // latency of one single-line undo log on an idle device
    @(negedge clk); t0 = longint'($time / 10);
    send(0, cmd(OP_UNDOLOG_CREATE, VBASE + 64'h3000, VBASE + 64'h6_0000, 64, 100, 0));
    @(negedge clk); while (all_complete[0]) @(negedge clk);
    while (!all_complete[0]) @(negedge clk);
    lat = longint'($time / 10) - t0;
    chk(lat >= 3 * LAT && lat <= 3 * LAT + 40, $sformatf("single-line undo log latency %0d cycles", lat));

    // duplicated undo log of a 256 B object interleaved over both devices;
    // device 1 gets its command 300 cycles later
    fork
      send(0, cmd(OP_UNDOLOG_CREATE, VBASE + 64'h1000, VBASE + 64'h8_0000, 256, 1, 1));
      begin repeat (300) @(posedge clk); send(1, cmd(OP_UNDOLOG_CREATE, VBASE + 64'h1000, VBASE + 64'h8_0000, 256, 1, 1)); end
      begin
        // the host updates the object right after logging it
        repeat (3) @(posedge clk);
        newv = rnd_line();
        hsend(0, 1, PBASE + 64'h1040, newv);
        hsend(0, 1, PBASE + 64'h2000, newv);
        // a command on the line of the queued second write must wait for it
        send(0, cmd(OP_CKPOINT_CREATE, VBASE + 64'h2000, VBASE + 64'hC_0000, 64, 7, 0));
        // commit waits for the undo log to complete on both devices
        send(0, cmd(OP_COMMIT_LOG, 0, VBASE + 64'h8_0000, 64 + 256, 2, 1));
      end
    join
    send(1, cmd(OP_COMMIT_LOG, 0, VBASE + 64'h8_0000, 64 + 256, 2, 1));
    wait_idle();
    for (int d = 0; d < ND; d++) begin
      for (int i = 0; i < 4; i++)
        chk(peek(d, PBASE + 64'h8_0040 + 64 * i) == obj[d][i], $sformatf("dev%0d undo log line %0d holds old data", d, i));
      h = log_hdr_t'(peek(d, PBASE + 64'h8_0000));
      chk(h.magic == HDR_MAGIC && h.obj_addr == PBASE + 64'h1000 && h.size == 256 && h.tag == 1,
          $sformatf("dev%0d log header", d));
      chk(!h.valid && h.committed, $sformatf("dev%0d log deleted by commit", d));
    end
    chk(peek(0, PBASE + 64'h1040) == newv, "host write applied after the log");
    chk(peek(0, PBASE + 64'hC_0040) == newv, "checkpoint saw the older host write");
    h = log_hdr_t'(peek(0, PBASE + 64'hC_0000)); chk(h.valid, "checkpoint header valid");

    // duplicated checkpoint: device 1 finishes before device 0 receives it
    for (int d = 0; d < ND; d++) for (int i = 0; i < 2; i++) begin
      cp[d][i] = rnd_line(); poke(d, PBASE + 64'h2_0000 + 64 * i, cp[d][i]);
    end
    send(1, cmd(OP_CKPOINT_CREATE, VBASE + 64'h2_0000, VBASE + 64'h2_8000, 128, 3, 1));
    repeat (6 * LAT) @(posedge clk);
    send(0, cmd(OP_CKPOINT_CREATE, VBASE + 64'h2_0000, VBASE + 64'h2_8000, 128, 3, 1));
    wait_idle();
    for (int d = 0; d < ND; d++) for (int i = 0; i < 2; i++)
      chk(peek(d, PBASE + 64'h2_8040 + 64 * i) == cp[d][i], $sformatf("dev%0d checkpoint line %0d", d, i));

    // six 4 kB shadow copies on device 0: more than the four units
    for (int i = 0; i < 64; i++) begin pg[i] = rnd_line(); poke(0, PBASE + 64'h10_0000 + 64 * i, pg[i]); end
    for (int k = 0; k < 6; k++)
      send(0, cmd(OP_SHADOWCPY, VBASE + 64'h10_0000, VBASE + 64'h20_0000 + 64'h1000 * k, 4096, 10 + k, 0));
    // host read of an unrelated line meanwhile
    poke(0, PBASE + 64'h5C00, newv);
    hsend(0, 0, PBASE + 64'h5C00, '0);
    wait_idle();
    for (int k = 0; k < 6; k++) begin
      automatic int bad = 0;
      for (int i = 0; i < 64; i++) if (peek(0, PBASE + 64'h20_0000 + 64'h1000 * k + 64 * i) != pg[i]) bad++;
      chk(bad == 0, $sformatf("shadow copy %0d", k));
    end
    chk(host_rd.size() > 0 && host_rd[host_rd.size() - 1] == newv, "host read data");

    // apply a redo log back to its object on both devices
    for (int d = 0; d < ND; d++) begin
      redo[d] = rnd_line(); poke(d, PBASE + 64'h30_0000, redo[d]);
    end
    for (int d = 0; d < ND; d++) send(d, cmd(OP_APPLYLOG, VBASE + 64'h30_0000, VBASE + 64'h1000, 64, 4, 1));
    wait_idle();
    for (int d = 0; d < ND; d++) chk(peek(d, PBASE + 64'h1000) == redo[d], $sformatf("dev%0d apply log", d));

    // mechanisms
    chk(n_stall_conflict[0] + n_stall_conflict[1] > 0, "mechanism: command held by in-flight conflict");
    chk(n_stall_host[0] > 0, "mechanism: command held by older host access");
    chk(n_stall_unit[0] > 0, "mechanism: command held with all units busy");
    chk(n_host_blocked[0] > 0, "mechanism: host access held back");
    chk(n_E > 0 && n_L > 0 && n_R > 0 && n_C > 0, $sformatf("mechanism: sync states E=%0d L=%0d R=%0d C=%0d", n_E, n_L, n_R, n_C));
    chk(n_early > 0, "mechanism: remote completion before local issue");
    chk(amt_full == 0, "no translation table overflow");
    $display("issued %0d/%0d conflict %0d host %0d unit %0d hostblk %0d E%0d L%0d R%0d C%0d early %0d",
      n_issued[0], n_issued[1], n_stall_conflict[0] + n_stall_conflict[1], n_stall_host[0], n_stall_unit[0],
      n_host_blocked[0], n_E, n_L, n_R, n_C, n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
