// inflight_access_table: the NearPM access table.
//
// One entry per NearPM unit records the physical byte ranges that the command
// running on that unit reads and writes (columns "NearPM unit", "read range",
// "write range" in the paper's ordering figure). It answers two conflict
// queries combinationally:
//   * q_*: a pending command may not be issued while its write range meets any
//     in-flight read or write range, or its read range meets an in-flight write
//     range (keeps NearPM-NearPM order);
//   * h_*: a host read waits while its line meets an in-flight write range, a
//     host write while its line meets any in-flight range (NearPM-host order).
// An entry is set when the dispatcher issues a command and cleared when the
// multi-device handler reports the command complete on all devices, so a
// conflicting access waits for the whole, possibly multi-device, command.
// q_conflict_vec/h_conflict_vec give the per-unit results. Ranges are [lo, hi).
module inflight_access_table
  import nearpm_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   set_en,
  input  logic [$clog2(NUM_UNITS)-1:0] set_unit,
  input  range_t                 set_rd,
  input  range_t                 set_wr,
  input  logic [NUM_UNITS-1:0]   clr,
  input  range_t                 q_rd,
  input  range_t                 q_wr,
  output logic                   q_conflict,
  output logic [NUM_UNITS-1:0]   q_conflict_vec,
  input  logic                   h_we,
  input  addr_t                  h_addr,
  output logic                   h_conflict,
  output logic [NUM_UNITS-1:0]   h_conflict_vec,
  output logic [NUM_UNITS-1:0]   busy
);
  logic [NUM_UNITS-1:0] vld_q;
  range_t               rd_q [NUM_UNITS];
  range_t               wr_q [NUM_UNITS];
  range_t               h_rng;

  assign busy = vld_q;

  always_comb begin
    h_rng.lo = {h_addr[ADDR_W-1:6], 6'd0};
    h_rng.hi = {h_addr[ADDR_W-1:6], 6'd0} + addr_t'(LINE_B);
    for (int u = 0; u < int'(NUM_UNITS); u++) begin
      q_conflict_vec[u] = vld_q[u] &&
        (overlap(q_wr, wr_q[u]) || overlap(q_wr, rd_q[u]) || overlap(q_rd, wr_q[u]));
      h_conflict_vec[u] = vld_q[u] &&
        (overlap(h_rng, wr_q[u]) || (h_we && overlap(h_rng, rd_q[u])));
    end
    q_conflict = |q_conflict_vec;
    h_conflict = |h_conflict_vec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
    end else begin
      for (int u = 0; u < int'(NUM_UNITS); u++) begin
        if (clr[u]) vld_q[u] <= 1'b0;
      end
      if (set_en) vld_q[set_unit] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (set_en) begin
      rd_q[set_unit] <= set_rd;
      wr_q[set_unit] <= set_wr;
    end
  end

endmodule
