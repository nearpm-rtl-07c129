// dispatcher: decodes, orders and issues NearPM commands; gates host accesses.
//
// Command path (the paper's steps 2a-6a): the head of the request FIFO is
// fetched into the request register; its source and destination operands are
// translated from virtual to physical through the address mapping table; the
// resulting read and write ranges are checked against the in-flight access
// table and against host accesses that arrived earlier and are still queued.
// A command with no conflict is issued to the lowest-numbered free NearPM
// unit: its ranges go into the access table, a copy into the in-flight request
// registers (4 x 64 B, the paper's 256 bytes), and the multi-device handler
// resets the unit's completion status. A conflicting command, or one that
// finds no free unit, waits in the request register and blocks the FIFO
// behind it. OP_SET_POOL is executed here: it stores src as the offset of key
// {pool_id, thread_id} in the address mapping table.
//
// Host path (steps 2b-3b): the head of the host read/write queue is released
// to PM only if it does not touch a range of an in-flight command (as
// reported on at_h_conflict; the device leaves out commands whose local part
// is already done), of the
// command in the request register, or of an older command still in the
// request FIFO; otherwise it waits ("buffer enable logic").
//
// The paper gives these steps; in-order issue, lowest-free-unit selection,
// arrival stamps for "older", and one issue per cycle are this design's
// choices. A command is fetched the cycle after it reaches the FIFO head and
// can be issued the cycle after that. Counters report the stalls.
module dispatcher
  import nearpm_pkg::*;
#(
  parameter int unsigned NUM_UNITS  = 4,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned HQ_DEPTH   = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // request FIFO
  input  logic                         fifo_valid,
  input  req_t                         fifo_req,
  input  logic [STAMP_W-1:0]           fifo_stamp,
  output logic                         fifo_pop,
  input  logic [FIFO_DEPTH-1:0]        fifo_ent_valid,
  input  logic [STAMP_W-1:0]           fifo_ent_stamp [FIFO_DEPTH],
  input  range_t                       fifo_ent_prd   [FIFO_DEPTH],
  input  range_t                       fifo_ent_pwr   [FIFO_DEPTH],
  // address mapping table
  output logic [15:0]                  amt_key,
  output addr_t                        amt_va0,
  output addr_t                        amt_va1,
  input  logic                         amt_hit,
  input  addr_t                        amt_pa0,
  input  addr_t                        amt_pa1,
  output logic                         amt_wr_en,
  output logic [15:0]                  amt_wr_key,
  output addr_t                        amt_wr_off,
  // in-flight access table
  output range_t                       at_q_rd,
  output range_t                       at_q_wr,
  input  logic                         at_q_conflict,
  output logic                         at_set_en,
  output logic [$clog2(NUM_UNITS)-1:0] at_set_unit,
  output range_t                       at_set_rd,
  output range_t                       at_set_wr,
  output logic [NUM_UNITS-1:0]         at_clr,
  output logic                         at_h_we,
  output addr_t                        at_h_addr,
  input  logic                         at_h_conflict,
  // host read/write queue
  input  logic [HQ_DEPTH-1:0]          hq_ent_valid,
  input  host_acc_t                    hq_ent_acc   [HQ_DEPTH],
  input  logic [STAMP_W-1:0]           hq_ent_stamp [HQ_DEPTH],
  input  logic                         hq_head_valid,
  input  host_acc_t                    hq_head_acc,
  input  logic [STAMP_W-1:0]           hq_head_stamp,
  output logic                         hq_head_go,
  output logic                         host_issue_valid,
  input  logic                         host_issue_ready,
  // multi-device handler
  input  logic [NUM_UNITS-1:0]         unit_free,
  output logic                         mdh_start,
  output logic [$clog2(NUM_UNITS)-1:0] mdh_start_unit,
  output logic [TAG_W-1:0]             mdh_start_tag,
  output logic                         mdh_start_dup,
  // NearPM units
  output logic [NUM_UNITS-1:0]         unit_req_valid,
  output req_t                         unit_req,
  output req_t                         inflight_req [NUM_UNITS],
  // statistics
  output logic [31:0]                  n_issued,
  output logic [31:0]                  n_stall_conflict,
  output logic [31:0]                  n_stall_host,
  output logic [31:0]                  n_stall_unit,
  output logic [31:0]                  n_host_blocked,
  output logic [31:0]                  n_set_pool
);
  localparam int unsigned UW = $clog2(NUM_UNITS);

  logic               rr_v;
  req_t               rr_q;      // request register (virtual addresses)
  logic [STAMP_W-1:0] rr_stamp;
  req_t               trq;       // translated command
  range_t             t_rd, t_wr;
  req_t               infl_q [NUM_UNITS];

  // translation (step 3a)
  assign amt_key = {rr_q.pool_id, rr_q.thread_id};
  assign amt_va0 = rr_q.src;
  assign amt_va1 = rr_q.dst;
  always_comb begin
    trq     = rr_q;
    trq.src = amt_pa0;
    trq.dst = amt_pa1;
    t_rd    = rd_range(trq);
    t_wr    = wr_range(trq);
  end
  assign at_q_rd = t_rd;
  assign at_q_wr = t_wr;

  // conflicts with older queued host accesses
  logic host_conf;
  always_comb begin
    host_conf = 1'b0;
    for (int i = 0; i < int'(HQ_DEPTH); i++) begin
      range_t hr;
      hr.lo = {hq_ent_acc[i].addr[ADDR_W-1:6], 6'd0};
      hr.hi = hr.lo + addr_t'(LINE_B);
      if (hq_ent_valid[i] && older(hq_ent_stamp[i], rr_stamp) &&
          (overlap(hr, t_wr) || (hq_ent_acc[i].we && overlap(hr, t_rd))))
        host_conf = 1'b1;
    end
  end

  // free unit (step 8a feeds unit_free)
  logic          any_free;
  logic [UW-1:0] free_u;
  always_comb begin
    any_free = 1'b0;
    free_u   = '0;
    for (int u = int'(NUM_UNITS) - 1; u >= 0; u--) begin
      if (unit_free[u]) begin
        any_free = 1'b1;
        free_u   = UW'(u);
      end
    end
  end

  wire is_set  = rr_v && (rr_q.op == OP_SET_POOL);
  wire can_iss = rr_v && !is_set && !at_q_conflict && !host_conf && any_free;
  wire consume = is_set || can_iss;

  assign fifo_pop   = fifo_valid && (!rr_v || consume);
  assign amt_wr_en  = is_set;
  assign amt_wr_key = {rr_q.pool_id, rr_q.thread_id};
  assign amt_wr_off = rr_q.src;

  assign at_set_en   = can_iss;
  assign at_set_unit = free_u;
  assign at_set_rd   = t_rd;
  assign at_set_wr   = t_wr;
  assign at_clr      = unit_free;

  assign mdh_start      = can_iss;
  assign mdh_start_unit = free_u;
  assign mdh_start_tag  = rr_q.tag[TAG_W-1:0];
  assign mdh_start_dup  = (rr_q.flags & FLAG_DUP) != 0;

  always_comb begin
    unit_req_valid = '0;
    if (can_iss) unit_req_valid[free_u] = 1'b1;
  end
  assign unit_req     = trq;
  assign inflight_req = infl_q;

  // host path (steps 2b, 3b)
  logic   h_pend_conf;
  range_t h_rng;
  always_comb begin
    h_rng.lo = {hq_head_acc.addr[ADDR_W-1:6], 6'd0};
    h_rng.hi = h_rng.lo + addr_t'(LINE_B);
    h_pend_conf = 1'b0;
    for (int i = 0; i < int'(FIFO_DEPTH); i++) begin
      if (fifo_ent_valid[i] && older(fifo_ent_stamp[i], hq_head_stamp) &&
          (overlap(h_rng, fifo_ent_pwr[i]) || (hq_head_acc.we && overlap(h_rng, fifo_ent_prd[i]))))
        h_pend_conf = 1'b1;
    end
    if (rr_v && older(rr_stamp, hq_head_stamp) &&
        (overlap(h_rng, t_wr) || (hq_head_acc.we && overlap(h_rng, t_rd))))
      h_pend_conf = 1'b1;
  end
  assign at_h_we          = hq_head_acc.we;
  assign at_h_addr        = hq_head_acc.addr;
  assign host_issue_valid = hq_head_valid && !at_h_conflict && !h_pend_conf;
  assign hq_head_go       = host_issue_valid && host_issue_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_v             <= 1'b0;
      n_issued         <= '0;
      n_stall_conflict <= '0;
      n_stall_host     <= '0;
      n_stall_unit     <= '0;
      n_host_blocked   <= '0;
      n_set_pool       <= '0;
    end else begin
      if (fifo_pop) rr_v <= 1'b1;
      else if (consume) rr_v <= 1'b0;
      n_issued   <= n_issued + 32'(can_iss);
      n_set_pool <= n_set_pool + 32'(is_set);
      if (rr_v && !is_set && at_q_conflict) n_stall_conflict <= n_stall_conflict + 1;
      if (rr_v && !is_set && !at_q_conflict && host_conf) n_stall_host <= n_stall_host + 1;
      if (rr_v && !is_set && !at_q_conflict && !host_conf && !any_free)
        n_stall_unit <= n_stall_unit + 1;
      if (hq_head_valid && (at_h_conflict || h_pend_conf)) n_host_blocked <= n_host_blocked + 1;
    end
  end

  always_ff @(posedge clk) begin
    if (fifo_pop) begin
      rr_q     <= fifo_req;
      rr_stamp <= fifo_stamp;
    end
    if (can_iss) infl_q[free_u] <= trq;
  end

  a_issue_free: assert property (@(posedge clk) disable iff (!rst_n)
    can_iss |-> unit_free[free_u]);

endmodule
