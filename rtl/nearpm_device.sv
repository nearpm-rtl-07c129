// nearpm_device: one NearPM device, the near-memory processor inside a PM
// module's controller.
//
// The host reaches the device through two channels: a command channel
// carrying 64-byte NearPM commands into the request FIFO, and ordinary
// loads/stores into the host read/write queue. The dispatcher takes commands
// in order, translates them through the address mapping table, holds them back
// while they conflict with in-flight commands (in-flight access table) or with
// older host accesses, and issues them to one of NUM_UNITS NearPM units. Each
// unit copies data, writes log headers or deletes logs in PM. The multi-device
// handler tracks completion of each command on this and the other devices and
// only then frees the unit, which delays the synchronisation between devices
// off the host's critical path. Host accesses are released to PM by the
// dispatcher when they do not touch a range that a command still running on
// this device is using (a command whose local part is done no longer holds
// the host back, even while it waits for the other devices). Units and the
// host queue share the PM port through a round-robin arbiter.
//
// The block structure and the ordering rules are the paper's; sizes are its
// prototype's (4 units, 32-entry 2 kB request FIFO, 4 kB host queue, 432 B
// translation table, 256 B in-flight request registers). The arrival stamps,
// the arbiter and all encodings are this design's.
//
// Interfaces: valid/ready on cmd_*, host_* and pm_req_*; host and PM
// responses come back in order with a one-cycle valid. remote_in_* receive
// completion notices from other devices (index = device id), remote_out_*
// send this device's. sync_state gives each unit's completion bits
// {Device0, Device1} (11 = all complete).
//
// Some outputs of the sub-blocks are not used here: the request copies kept
// in each FIFO entry and the FIFO count, the per-unit command-conflict vector,
// the access table's busy vector and the in-flight request registers. They
// are kept in those blocks as the persistent state the paper places in the
// power-fail domain and for observation; synthesis removes what has no load.
module nearpm_device
  import nearpm_pkg::*;
#(
  parameter int unsigned NUM_UNITS  = 4,
  parameter int unsigned NUM_DEV    = 2,
  parameter int unsigned DEV_ID     = 0,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned HQ_DEPTH   = 64,
  parameter int unsigned AMT_ENTRIES = 48,
  parameter int unsigned BURST      = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command channel
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  req_t                 cmd_req,
  // host loads/stores
  input  logic                 host_valid,
  output logic                 host_ready,
  input  host_acc_t            host_acc,
  output logic                 host_rsp_valid,
  output line_t                host_rsp_rdata,
  // PM media
  output logic                 pm_req_valid,
  input  logic                 pm_req_ready,
  output mem_req_t             pm_req,
  input  logic                 pm_rsp_valid,
  input  line_t                pm_rsp_rdata,
  // cross-device completion
  input  logic [NUM_DEV-1:0]   remote_in_valid,
  input  logic [TAG_W-1:0]     remote_in_tag [NUM_DEV],
  output logic                 remote_out_valid,
  output logic [TAG_W-1:0]     remote_out_tag,
  // status
  output logic [NUM_DEV-1:0]   sync_state [NUM_UNITS],
  output logic                 all_complete,
  output logic [NUM_UNITS-1:0] units_busy,
  output logic [31:0]          n_issued,
  output logic [31:0]          n_stall_conflict,
  output logic [31:0]          n_stall_host,
  output logic [31:0]          n_stall_unit,
  output logic [31:0]          n_host_blocked,
  output logic [31:0]          n_set_pool,
  output logic                 amt_full
);
  localparam int unsigned UW = $clog2(NUM_UNITS);

  // arrival stamps shared by both queues; a command and a host access that
  // arrive in the same cycle are ordered command first
  logic [STAMP_W-1:0] stamp_q;
  wire cmd_push  = cmd_valid && cmd_ready;
  wire host_push = host_valid && host_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stamp_q <= '0;
    else stamp_q <= stamp_q + STAMP_W'(cmd_push) + STAMP_W'(host_push);
  end

  // address mapping table
  logic [15:0] amt_key, amt_wr_key;
  addr_t       amt_va0, amt_va1, amt_pa0, amt_pa1, amt_wr_off, arr_pa0, arr_pa1;
  logic        amt_hit, amt_wr_en;
  addr_map_table #(.ENTRIES(AMT_ENTRIES)) u_amt (
    .clk, .rst_n, .wr_en(amt_wr_en), .wr_key(amt_wr_key), .wr_off(amt_wr_off),
    .lk_key(amt_key), .lk_va0(amt_va0), .lk_va1(amt_va1), .lk_hit(amt_hit),
    .lk_pa0(amt_pa0), .lk_pa1(amt_pa1),
    .lk2_key({cmd_req.pool_id, cmd_req.thread_id}), .lk2_va0(cmd_req.src), .lk2_va1(cmd_req.dst),
    .lk2_pa0(arr_pa0), .lk2_pa1(arr_pa1), .full(amt_full)
  );

  // physical ranges of an arriving command, for the host-side lookup
  req_t   arr_req;
  range_t arr_prd, arr_pwr;
  always_comb begin
    arr_req     = cmd_req;
    arr_req.src = arr_pa0;
    arr_req.dst = arr_pa1;
    arr_prd     = rd_range(arr_req);
    arr_pwr     = wr_range(arr_req);
  end

  // request FIFO
  logic               f_valid, f_pop;
  req_t               f_req;
  logic [STAMP_W-1:0] f_stamp;
  logic [FIFO_DEPTH-1:0] f_ent_valid;
  req_t               f_ent_req   [FIFO_DEPTH];
  logic [STAMP_W-1:0] f_ent_stamp [FIFO_DEPTH];
  range_t             f_ent_prd   [FIFO_DEPTH];
  range_t             f_ent_pwr   [FIFO_DEPTH];
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;
  request_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(cmd_valid), .in_ready(cmd_ready), .in_req(cmd_req),
    .in_stamp(stamp_q), .in_prd(arr_prd), .in_pwr(arr_pwr),
    .out_valid(f_valid), .out_ready(f_pop), .out_req(f_req), .out_stamp(f_stamp),
    .ent_valid(f_ent_valid), .ent_req(f_ent_req), .ent_stamp(f_ent_stamp),
    .ent_prd(f_ent_prd), .ent_pwr(f_ent_pwr), .count(f_count)
  );

  // host read/write queue
  logic               hq_head_valid, hq_head_go;
  host_acc_t          hq_head_acc;
  logic [STAMP_W-1:0] hq_head_stamp;
  logic [HQ_DEPTH-1:0] hq_ent_valid;
  host_acc_t          hq_ent_acc   [HQ_DEPTH];
  logic [STAMP_W-1:0] hq_ent_stamp [HQ_DEPTH];
  host_rw_queue #(.DEPTH(HQ_DEPTH)) u_hq (
    .clk, .rst_n, .in_valid(host_valid), .in_ready(host_ready), .in_acc(host_acc),
    .in_stamp(stamp_q + STAMP_W'(cmd_push)), .head_valid(hq_head_valid), .head_acc(hq_head_acc),
    .head_stamp(hq_head_stamp), .head_go(hq_head_go),
    .ent_valid(hq_ent_valid), .ent_acc(hq_ent_acc), .ent_stamp(hq_ent_stamp)
  );

  // in-flight access table
  range_t               at_q_rd, at_q_wr, at_set_rd, at_set_wr;
  logic                 at_q_conflict, at_set_en, at_h_we, at_h_any, at_h_conflict;
  logic [UW-1:0]        at_set_unit;
  logic [NUM_UNITS-1:0] at_clr, at_qv, at_hv;
  addr_t                at_h_addr;
  inflight_access_table #(.NUM_UNITS(NUM_UNITS)) u_at (
    .clk, .rst_n, .set_en(at_set_en), .set_unit(at_set_unit), .set_rd(at_set_rd),
    .set_wr(at_set_wr), .clr(at_clr), .q_rd(at_q_rd), .q_wr(at_q_wr),
    .q_conflict(at_q_conflict), .q_conflict_vec(at_qv), .h_we(at_h_we), .h_addr(at_h_addr),
    .h_conflict(at_h_any), .h_conflict_vec(at_hv), .busy()
  );

  // multi-device handler
  logic                 mdh_start, mdh_dup;
  logic [UW-1:0]        mdh_unit;
  logic [TAG_W-1:0]     mdh_tag;
  logic [NUM_UNITS-1:0] unit_free, unit_done;
  // A host access waits only for units whose command is still running on
  // this device. Once the local part is in PM the host may go on, while the
  // unit and its ranges stay held for later commands until every device has
  // finished (delayed synchronisation).
  always_comb begin
    at_h_conflict = 1'b0;
    for (int u = 0; u < int'(NUM_UNITS); u++)
      if (at_h_any && at_hv[u] && !sync_state[u][DEV_ID]) at_h_conflict = 1'b1;
  end

  multi_device_handler #(.NUM_UNITS(NUM_UNITS), .NUM_DEV(NUM_DEV), .DEV_ID(DEV_ID)) u_mdh (
    .clk, .rst_n, .start(mdh_start), .start_unit(mdh_unit), .start_tag(mdh_tag),
    .start_dup(mdh_dup), .local_done(unit_done), .remote_in_valid(remote_in_valid),
    .remote_in_tag(remote_in_tag), .remote_out_valid(remote_out_valid),
    .remote_out_tag(remote_out_tag), .unit_free(unit_free), .comp(sync_state),
    .all_complete(all_complete)
  );

  // dispatcher
  logic [NUM_UNITS-1:0] unit_req_valid;
  req_t                 unit_req;
  req_t                 inflight_req [NUM_UNITS];
  logic                 host_issue_valid, host_issue_ready;
  dispatcher #(.NUM_UNITS(NUM_UNITS), .FIFO_DEPTH(FIFO_DEPTH), .HQ_DEPTH(HQ_DEPTH)) u_disp (
    .clk, .rst_n,
    .fifo_valid(f_valid), .fifo_req(f_req), .fifo_stamp(f_stamp), .fifo_pop(f_pop),
    .fifo_ent_valid(f_ent_valid), .fifo_ent_stamp(f_ent_stamp),
    .fifo_ent_prd(f_ent_prd), .fifo_ent_pwr(f_ent_pwr),
    .amt_key(amt_key), .amt_va0(amt_va0), .amt_va1(amt_va1), .amt_hit(amt_hit),
    .amt_pa0(amt_pa0), .amt_pa1(amt_pa1), .amt_wr_en(amt_wr_en), .amt_wr_key(amt_wr_key),
    .amt_wr_off(amt_wr_off),
    .at_q_rd(at_q_rd), .at_q_wr(at_q_wr), .at_q_conflict(at_q_conflict),
    .at_set_en(at_set_en), .at_set_unit(at_set_unit), .at_set_rd(at_set_rd),
    .at_set_wr(at_set_wr), .at_clr(at_clr), .at_h_we(at_h_we), .at_h_addr(at_h_addr),
    .at_h_conflict(at_h_conflict),
    .hq_ent_valid(hq_ent_valid), .hq_ent_acc(hq_ent_acc), .hq_ent_stamp(hq_ent_stamp),
    .hq_head_valid(hq_head_valid), .hq_head_acc(hq_head_acc), .hq_head_stamp(hq_head_stamp),
    .hq_head_go(hq_head_go), .host_issue_valid(host_issue_valid),
    .host_issue_ready(host_issue_ready),
    .unit_free(unit_free), .mdh_start(mdh_start), .mdh_start_unit(mdh_unit),
    .mdh_start_tag(mdh_tag), .mdh_start_dup(mdh_dup),
    .unit_req_valid(unit_req_valid), .unit_req(unit_req), .inflight_req(inflight_req),
    .n_issued(n_issued), .n_stall_conflict(n_stall_conflict), .n_stall_host(n_stall_host),
    .n_stall_unit(n_stall_unit), .n_host_blocked(n_host_blocked), .n_set_pool(n_set_pool)
  );

  // NearPM units and the PM port arbiter (requester NUM_UNITS is the host)
  localparam int unsigned NR = NUM_UNITS + 1;
  logic [NR-1:0] arb_req_valid, arb_req_ready, arb_rsp_valid;
  mem_req_t      arb_req [NR];
  line_t         arb_rsp_rdata;

  for (genvar u = 0; u < int'(NUM_UNITS); u++) begin : g_unit
    nearpm_unit #(.BURST(BURST)) u_unit (
      .clk, .rst_n, .req_valid(unit_req_valid[u]), .req(unit_req),
      .busy(units_busy[u]), .done(unit_done[u]),
      .mem_req_valid(arb_req_valid[u]), .mem_req_ready(arb_req_ready[u]),
      .mem_req(arb_req[u]), .mem_rsp_valid(arb_rsp_valid[u]), .mem_rsp_rdata(arb_rsp_rdata)
    );
  end

  assign arb_req_valid[NUM_UNITS] = host_issue_valid;
  assign host_issue_ready         = arb_req_ready[NUM_UNITS];
  always_comb begin
    arb_req[NUM_UNITS].we    = hq_head_acc.we;
    arb_req[NUM_UNITS].addr  = {hq_head_acc.addr[ADDR_W-1:6], 6'd0};
    arb_req[NUM_UNITS].wdata = hq_head_acc.data;
  end
  assign host_rsp_valid = arb_rsp_valid[NUM_UNITS];
  assign host_rsp_rdata = arb_rsp_rdata;

  mem_arbiter #(.N(NR)) u_arb (
    .clk, .rst_n, .req_valid(arb_req_valid), .req_ready(arb_req_ready), .req(arb_req),
    .rsp_valid(arb_rsp_valid), .rsp_rdata(arb_rsp_rdata),
    .pm_req_valid(pm_req_valid), .pm_req_ready(pm_req_ready), .pm_req(pm_req),
    .pm_rsp_valid(pm_rsp_valid), .pm_rsp_rdata(pm_rsp_rdata)
  );

endmodule
