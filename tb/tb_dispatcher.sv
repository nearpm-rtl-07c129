// tb_dispatcher: the dispatcher with the real request FIFO, host queue,
// address mapping table and in-flight access table around it; the test plays
// the NearPM units and the multi-device handler (unit_free) and the PM port
// (host_issue_ready). Checks: pool registration and translation of both
// operands; issue to the lowest free unit with tag and duplicate flag; a
// command that writes a range being read waits until that unit is freed; a
// command waits while no unit is free; a host write to a range being read is
// held back while an unrelated host read passes; a host write queued before a
// command on the same line holds the command back; a host access that arrives
// after a pending command on its line waits for it.
module tb_dispatcher;
  import nearpm_pkg::*;
  localparam int U = 4, FD = 32, HD = 64;
  localparam addr_t VBASE = 64'h7f00_0000_0000, PBASE = 64'h4000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // FIFO
  logic cmd_valid, cmd_ready, f_valid, f_pop; req_t cmd_req, f_req;
  logic [STAMP_W-1:0] stamp, f_stamp; logic [FD-1:0] f_ev; req_t f_er [FD];
  logic [STAMP_W-1:0] f_es [FD]; range_t f_prd [FD], f_pwr [FD]; logic [5:0] f_cnt;
  // host queue
  logic host_valid, host_ready, hq_hv, hq_go, host_issue_valid, host_issue_ready;
  host_acc_t host_acc, hq_ha; logic [STAMP_W-1:0] hq_hs; logic [HD-1:0] hq_ev;
  host_acc_t hq_ea [HD]; logic [STAMP_W-1:0] hq_es [HD];
  // AMT
  logic [15:0] amt_key, amt_wr_key; addr_t amt_va0, amt_va1, amt_pa0, amt_pa1, amt_wr_off, a2p0, a2p1;
  logic amt_hit, amt_wr_en, amt_full;
  // table
  range_t at_q_rd, at_q_wr, at_set_rd, at_set_wr; logic at_q_conflict, at_set_en, at_h_we, at_h_conflict;
  logic [1:0] at_set_unit; logic [U-1:0] at_clr, qv, hv, at_busy; addr_t at_h_addr;
  // dispatcher outputs
  logic [U-1:0] unit_free, unit_req_valid; logic mdh_start, mdh_dup; logic [1:0] mdh_unit;
  logic [TAG_W-1:0] mdh_tag; req_t unit_req; req_t infl [U];
  logic [31:0] n_issued, n_stall_conflict, n_stall_host, n_stall_unit, n_host_blocked, n_set_pool;

  req_t arr; range_t arr_prd, arr_pwr;
  always_comb begin
    arr = cmd_req; arr.src = a2p0; arr.dst = a2p1;
    arr_prd = rd_range(arr); arr_pwr = wr_range(arr);
  end

  request_fifo #(.DEPTH(FD)) u_fifo (.clk, .rst_n, .in_valid(cmd_valid), .in_ready(cmd_ready),
    .in_req(cmd_req), .in_stamp(stamp), .in_prd(arr_prd), .in_pwr(arr_pwr), .out_valid(f_valid),
    .out_ready(f_pop), .out_req(f_req), .out_stamp(f_stamp), .ent_valid(f_ev), .ent_req(f_er),
    .ent_stamp(f_es), .ent_prd(f_prd), .ent_pwr(f_pwr), .count(f_cnt));
  host_rw_queue #(.DEPTH(HD)) u_hq (.clk, .rst_n, .in_valid(host_valid), .in_ready(host_ready),
    .in_acc(host_acc), .in_stamp(stamp), .head_valid(hq_hv), .head_acc(hq_ha), .head_stamp(hq_hs),
    .head_go(hq_go), .ent_valid(hq_ev), .ent_acc(hq_ea), .ent_stamp(hq_es));
  addr_map_table u_amt (.clk, .rst_n, .wr_en(amt_wr_en), .wr_key(amt_wr_key), .wr_off(amt_wr_off),
    .lk_key(amt_key), .lk_va0(amt_va0), .lk_va1(amt_va1), .lk_hit(amt_hit), .lk_pa0(amt_pa0),
    .lk_pa1(amt_pa1), .lk2_key({cmd_req.pool_id, cmd_req.thread_id}), .lk2_va0(cmd_req.src),
    .lk2_va1(cmd_req.dst), .lk2_pa0(a2p0), .lk2_pa1(a2p1), .full(amt_full));
  inflight_access_table #(.NUM_UNITS(U)) u_at (.clk, .rst_n, .set_en(at_set_en), .set_unit(at_set_unit),
    .set_rd(at_set_rd), .set_wr(at_set_wr), .clr(at_clr), .q_rd(at_q_rd), .q_wr(at_q_wr),
    .q_conflict(at_q_conflict), .q_conflict_vec(qv), .h_we(at_h_we), .h_addr(at_h_addr),
    .h_conflict(at_h_conflict), .h_conflict_vec(hv), .busy(at_busy));
  dispatcher #(.NUM_UNITS(U), .FIFO_DEPTH(FD), .HQ_DEPTH(HD)) dut (
    .clk, .rst_n, .fifo_valid(f_valid), .fifo_req(f_req), .fifo_stamp(f_stamp), .fifo_pop(f_pop),
    .fifo_ent_valid(f_ev), .fifo_ent_stamp(f_es), .fifo_ent_prd(f_prd), .fifo_ent_pwr(f_pwr),
    .amt_key, .amt_va0, .amt_va1, .amt_hit, .amt_pa0, .amt_pa1, .amt_wr_en, .amt_wr_key, .amt_wr_off,
    .at_q_rd, .at_q_wr, .at_q_conflict, .at_set_en, .at_set_unit, .at_set_rd, .at_set_wr, .at_clr,
    .at_h_we, .at_h_addr, .at_h_conflict,
    .hq_ent_valid(hq_ev), .hq_ent_acc(hq_ea), .hq_ent_stamp(hq_es), .hq_head_valid(hq_hv),
    .hq_head_acc(hq_ha), .hq_head_stamp(hq_hs), .hq_head_go(hq_go), .host_issue_valid,
    .host_issue_ready, .unit_free, .mdh_start, .mdh_start_unit(mdh_unit), .mdh_start_tag(mdh_tag),
    .mdh_start_dup(mdh_dup), .unit_req_valid, .unit_req, .inflight_req(infl),
    .n_issued, .n_stall_conflict, .n_stall_host, .n_stall_unit, .n_host_blocked, .n_set_pool);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) stamp <= '0;
    else if ((cmd_valid && cmd_ready) || (host_valid && host_ready)) stamp <= stamp + 1'b1;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // unit model: a unit is busy from issue until the test frees it
  logic [U-1:0] hold;
  req_t got [U]; int n_got [U];
  always @(posedge clk) begin
    if (!rst_n) begin unit_free <= '1; for (int u = 0; u < U; u++) n_got[u] = 0; end
    else for (int u = 0; u < U; u++) begin
      if (unit_req_valid[u]) begin
        got[u] = unit_req; n_got[u]++;
        unit_free[u] <= 1'b0;
      end else if (!hold[u]) unit_free[u] <= 1'b1;
    end
  end

  function automatic req_t cmd(op_e op, addr_t s, addr_t d, int sz, int tag, logic dup);
    req_t r = '0;
    r.op = op; r.src = s; r.dst = d; r.size = sz; r.tag = 16'(tag); r.pool_id = 8'd1;
    r.flags = dup ? FLAG_DUP : 8'h0;
    return r;
  endfunction
  task automatic send(input req_t r);
    @(negedge clk); cmd_valid = 1; cmd_req = r; @(negedge clk); cmd_valid = 0;
  endtask
  task automatic hsend(input logic we, input addr_t a);
    @(negedge clk); host_valid = 1; host_acc.we = we; host_acc.addr = a; host_acc.data = {8{a}};
    @(negedge clk); host_valid = 0;
  endtask
  int host_done = 0; addr_t host_last;
  always @(posedge clk) if (rst_n && hq_go) begin host_done++; host_last = hq_ha.addr; end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n0, h0;
    cmd_valid = 0; cmd_req = '0; host_valid = 0; host_acc = '0; host_issue_ready = 1; hold = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // register pool 1: offset = physical base - virtual base
    begin automatic req_t r = '0; r.op = OP_SET_POOL; r.pool_id = 1; r.src = PBASE - VBASE; send(r); end
    repeat (3) @(posedge clk);
    chk(n_set_pool == 1, "SET_POOL executed");
    // undo log of 256 B at VA+0x1000 into log at VA+0x80000; unit 0 stays busy
    hold = 4'b0001;
    send(cmd(OP_UNDOLOG_CREATE, VBASE + 64'h1000, VBASE + 64'h8_0000, 256, 11, 1));
    repeat (3) @(posedge clk);
    chk(n_got[0] == 1 && got[0].src == PBASE + 64'h1000 && got[0].dst == PBASE + 64'h8_0000, "translated and issued to unit 0");
    chk(infl[0].op == OP_UNDOLOG_CREATE && infl[0].src == PBASE + 64'h1000, "in-flight request register");
    // a command that writes the range being logged must wait
    send(cmd(OP_APPLYLOG, VBASE + 64'h9_0000, VBASE + 64'h1040, 64, 12, 0));
    repeat (10) @(posedge clk);
    chk(n_got[1] == 0 && n_got[0] == 1 && n_stall_conflict >= 5, "conflicting command waits");
    // meanwhile: host read elsewhere passes, host write to the logged range waits
    hsend(0, PBASE + 64'h5C00); repeat (2) @(posedge clk);
    chk(host_done == 1 && host_last == PBASE + 64'h5C00, "unrelated host read passes");
    hsend(1, PBASE + 64'h1080); repeat (5) @(posedge clk);
    chk(host_done == 1 && n_host_blocked > 0, "host write to logged range waits");
    hold = 4'b0000; repeat (4) @(posedge clk);
    chk(host_done == 2, "host write released when unit completes");
    chk(n_got[0] == 2 && got[0].op == OP_APPLYLOG && got[0].dst == PBASE + 64'h1040, "waiting command issued to lowest free unit");
    // no free unit
    hold = 4'b1111; repeat (2) @(posedge clk);
    for (int i = 0; i < 4; i++) send(cmd(OP_SHADOWCPY, VBASE + 64'h10_0000 * (addr_t'(i) + 64'd1), VBASE + 64'h100_0000 + 64'h10_0000 * addr_t'(i), 4096, 20 + i, 0));
    repeat (3) @(posedge clk);
    n0 = n_got[0] + n_got[1] + n_got[2] + n_got[3];
    send(cmd(OP_SHADOWCPY, VBASE + 64'h90_0000, VBASE + 64'h200_0000, 4096, 30, 0));
    repeat (6) @(posedge clk);
    chk(n_got[0] + n_got[1] + n_got[2] + n_got[3] == n0 && n_stall_unit > 0, "waits while no unit is free");
    hold = 4'b1011; repeat (4) @(posedge clk);
    chk(n_got[2] >= 1 && got[2].tag == 30, "issued when unit 2 is freed");
    hold = 4'b0000; repeat (4) @(posedge clk);
    // host write queued before a command on the same line holds the command
    host_issue_ready = 0;
    h0 = host_done;
    hsend(1, PBASE + 64'h7000);
    n0 = n_issued;
    send(cmd(OP_UNDOLOG_CREATE, VBASE + 64'h7000, VBASE + 64'hA_0000, 64, 40, 0));
    repeat (6) @(posedge clk);
    chk(n_issued == n0 && n_stall_host > 0, "command waits for older host write");
    host_issue_ready = 1; repeat (4) @(posedge clk);
    chk(host_done == h0 + 1 && n_issued == n0 + 1, "host write first, then command");
    // host access arriving after a pending command on its line waits; all
    // units are first occupied so the command stays pending
    hold = 4'b1111;
    for (int i = 0; i < 4; i++) send(cmd(OP_SHADOWCPY, VBASE + 64'h30_0000 + 64'h1000 * i, VBASE + 64'h40_0000 + 64'h1000 * i, 4096, 50 + i, 0));
    repeat (3) @(posedge clk);
    send(cmd(OP_CKPOINT_CREATE, VBASE + 64'hC000, VBASE + 64'hD_0000, 128, 41, 0));
    h0 = host_done;
    hsend(1, PBASE + 64'hC040);
    repeat (6) @(posedge clk);
    chk(host_done == h0, "host write waits for older pending command");
    // free unit 1 for one cycle only, so the checkpoint is issued and held
    @(negedge clk); hold = 4'b1101; @(negedge clk); @(negedge clk); hold = 4'b1111;
    repeat (6) @(posedge clk);
    chk(infl[1].op == OP_CKPOINT_CREATE, "checkpoint in flight on unit 1");
    chk(host_done == h0, "host write waits for in-flight command");
    hold = 4'b0000; repeat (4) @(posedge clk);
    chk(host_done == h0 + 1, "host write released at completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
