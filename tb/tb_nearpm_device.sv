// tb_nearpm_device: one NearPM device (device 0 of two) at default sizes with
// a PM model; the test plays device 1 on the completion wires. Checks: an
// undo log captures the old data while a host write to the same line is held
// back until the local part of the command is done, after which the write
// lands even though device 1 has not yet finished; a
// duplicated command keeps its unit (and the ranges it uses) until device 1
// reports completion, and the device broadcasts its own completion with the
// command's tag; a completion from device 1 that arrives before the command is
// issued lets the command finish without waiting; a host read returns the PM
// data; the cycle count of a single-line checkpoint on an idle device is three
// PM round trips plus a bounded overhead.
module tb_nearpm_device;
  import nearpm_pkg::*;
  localparam int LAT = 131;
  localparam addr_t VBASE = 64'h1000_0000, PBASE = 64'h8000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, host_valid, host_ready, host_rsp_valid;
  logic pm_req_valid, pm_req_ready, pm_rsp_valid, remote_out_valid, all_complete, amt_full;
  req_t cmd_req; host_acc_t host_acc; line_t host_rsp_rdata, pm_rsp_rdata; mem_req_t pm_req;
  logic [1:0] remote_in_valid; logic [TAG_W-1:0] remote_in_tag [2], remote_out_tag;
  logic [1:0] sync_state [4]; logic [3:0] units_busy;
  logic [31:0] n_issued, n_stall_conflict, n_stall_host, n_stall_unit, n_host_blocked, n_set_pool;

  nearpm_device dut (.*);
  pm_mem_model #(.LATENCY(LAT)) pm (.clk, .rst_n, .req_valid(pm_req_valid), .req_ready(pm_req_ready),
    .req(pm_req), .rsp_valid(pm_rsp_valid), .rsp_rdata(pm_rsp_rdata));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction
  function automatic req_t cmd(op_e op, addr_t s, addr_t d, int sz, int tag, logic dup);
    req_t r = '0;
    r.op = op; r.src = s; r.dst = d; r.size = sz; r.tag = 16'(tag); r.pool_id = 8'd2;
    r.flags = dup ? FLAG_DUP : 8'h0;
    return r;
  endfunction
  task automatic send(input req_t r);
    @(negedge clk); chk(cmd_ready, "command FIFO has room");
    cmd_valid = 1; cmd_req = r; @(negedge clk); cmd_valid = 0;
  endtask
  task automatic hsend(input logic we, input addr_t a, input line_t v);
    @(negedge clk); chk(host_ready, "host queue has room");
    host_valid = 1; host_acc.we = we; host_acc.addr = a; host_acc.data = v;
    @(negedge clk); host_valid = 0;
  endtask
  task automatic remote_done(input int tag);
    @(negedge clk); remote_in_valid[1] = 1; remote_in_tag[1] = TAG_W'(tag);
    @(negedge clk); remote_in_valid[1] = 0;
  endtask

  int n_bcast; logic [TAG_W-1:0] last_bcast;
  line_t hrd [$];
  always @(posedge clk) if (rst_n) begin
    if (remote_out_valid) begin n_bcast++; last_bcast = remote_out_tag; end
    if (host_rsp_valid) hrd.push_back(host_rsp_rdata);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    line_t old [2], nv, x;
    log_hdr_t h;
    longint t0, lat;
    cmd_valid = 0; cmd_req = '0; host_valid = 0; host_acc = '0; remote_in_valid = 0;
    remote_in_tag[0] = '0; remote_in_tag[1] = '0; n_bcast = 0;
    for (int i = 0; i < 2; i++) begin old[i] = rnd_line(); pm.poke(PBASE + 64'h400 + 64 * i, old[i]); end
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    begin automatic req_t r = '0; r.op = OP_SET_POOL; r.pool_id = 2; r.src = PBASE - VBASE; send(r); end

    // single-line checkpoint latency on an idle device (not duplicated)
    x = rnd_line(); pm.poke(PBASE + 64'h9000, x);
    @(negedge clk); t0 = longint'($time / 10);
    send(cmd(OP_CKPOINT_CREATE, VBASE + 64'h9000, VBASE + 64'hA000, 64, 9, 0));
    @(negedge clk); while (all_complete) @(negedge clk);
    while (!all_complete) @(negedge clk);
    lat = longint'($time / 10) - t0;
    chk(lat >= 3 * LAT && lat <= 3 * LAT + 40, $sformatf("checkpoint latency %0d cycles", lat));
    chk(pm.peek(PBASE + 64'hA040) == x, "checkpoint copy");
    chk(n_bcast == 0, "no broadcast for a command that is not duplicated");

    // duplicated undo log of 128 B, then a host write to its second line
    send(cmd(OP_UNDOLOG_CREATE, VBASE + 64'h400, VBASE + 64'h2_0000, 128, 5, 1));
    nv = rnd_line();
    hsend(1, PBASE + 64'h440, nv);
    repeat (LAT) @(posedge clk);
    chk(pm.peek(PBASE + 64'h440) == old[1], "host write held while the undo log runs");
    repeat (7 * LAT) @(posedge clk);
    chk(n_bcast == 1 && last_bcast == 5, "local completion broadcast with its tag");
    chk(sync_state[0] == 2'b01, "unit waits in local-complete state");
    chk(!all_complete && pm.peek(PBASE + 64'h440) == nv, "host write lands once the local part is done, before device 1 completes");
    chk(n_host_blocked > 0, "host block counted");
    remote_done(5);
    repeat (2 * LAT) @(posedge clk);
    chk(all_complete && sync_state[0] == 2'b11, "complete on both devices");
    chk(pm.peek(PBASE + 64'h440) == nv, "host write still in place");
    for (int i = 0; i < 2; i++) chk(pm.peek(PBASE + 64'h2_0040 + 64 * i) == old[i], "undo log holds old data");
    h = log_hdr_t'(pm.peek(PBASE + 64'h2_0000));
    chk(h.valid && h.magic == HDR_MAGIC && h.obj_addr == PBASE + 64'h400 && h.size == 128, "log header");

    // device 1 completes the commit before this device receives it
    remote_done(6);
    send(cmd(OP_COMMIT_LOG, 0, VBASE + 64'h2_0000, 192, 6, 1));
    repeat (6 * LAT) @(posedge clk);
    chk(all_complete, "early remote completion: no wait");
    h = log_hdr_t'(pm.peek(PBASE + 64'h2_0000));
    chk(!h.valid && h.committed, "log deleted");
    chk(n_bcast == 2 && last_bcast == 6, "commit completion broadcast");

    // host read
    hsend(0, PBASE + 64'h440, '0);
    repeat (2 * LAT) @(posedge clk);
    chk(hrd.size() > 0 && hrd[hrd.size() - 1] == nv, "host read data");
    chk(n_issued == 3 && n_set_pool == 1 && !amt_full, "issue counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
