// multi_device_handler: cross-device completion tracking (delayed sync).
//
// A command that works on an object spread over several interleaved NearPM
// devices is sent to all of them. This block keeps, for the command on each
// NearPM unit, one "complete?" bit per device, as in the paper's table with
// rows Device0/Device1. When the dispatcher issues a command (start), the bits
// are reset; the local unit's completion (local_done) sets this device's bit
// and is broadcast to the other devices (remote_out_*); completions received
// from other devices (remote_in_*) set theirs. The unit is handed back to the
// dispatcher (unit_free) only when every bit is set, i.e. when the command is
// complete and persistent on all devices. Because the in-flight access table
// keeps the unit's ranges until then, a later command that would delete the
// logs waits for this synchronisation, while the host is not stalled.
//
// For two devices the bits {Device0, Device1} are the states printed in the
// paper's synchronisation state machine: All Complete C=11, Executing E=00,
// Local Complete L=10, Remote Complete R=01 (named from Device0's view).
// This design's own choices: completions are matched by the command's tag; a
// completion that arrives before this device has issued the same command is
// remembered in a per-tag bit and applied at issue; a command that is not
// duplicated gets the other devices' bits set at issue; at most one completion
// is broadcast per cycle, lowest unit first, and a unit is not reused until its
// completion has been broadcast.
module multi_device_handler
  import nearpm_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 4,
  parameter int unsigned NUM_DEV   = 2,
  parameter int unsigned DEV_ID    = 0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(NUM_UNITS)-1:0] start_unit,
  input  logic [TAG_W-1:0]             start_tag,
  input  logic                         start_dup,
  input  logic [NUM_UNITS-1:0]         local_done,
  input  logic [NUM_DEV-1:0]           remote_in_valid,
  input  logic [TAG_W-1:0]             remote_in_tag [NUM_DEV],
  output logic                         remote_out_valid,
  output logic [TAG_W-1:0]             remote_out_tag,
  output logic [NUM_UNITS-1:0]         unit_free,
  output logic [NUM_DEV-1:0]           comp [NUM_UNITS],
  output logic                         all_complete
);
  localparam int unsigned NT = 1 << TAG_W;

  logic [NUM_DEV-1:0]   comp_q  [NUM_UNITS];
  logic [TAG_W-1:0]     tag_q   [NUM_UNITS];
  logic [NUM_UNITS-1:0] dup_q;
  logic [NUM_UNITS-1:0] notify_q;
  logic [NT-1:0]        early_q [NUM_DEV];

  // broadcast arbitration: lowest unit with a pending notification
  logic                         nsel_v;
  logic [$clog2(NUM_UNITS)-1:0] nsel;
  always_comb begin
    nsel_v = 1'b0;
    nsel   = '0;
    for (int u = int'(NUM_UNITS) - 1; u >= 0; u--) begin
      if (notify_q[u]) begin
        nsel_v = 1'b1;
        nsel   = u[$clog2(NUM_UNITS)-1:0];
      end
    end
  end
  assign remote_out_valid = nsel_v;
  assign remote_out_tag   = tag_q[nsel];

  always_comb begin
    all_complete = 1'b1;
    for (int u = 0; u < int'(NUM_UNITS); u++) begin
      unit_free[u] = (&comp_q[u]) && !notify_q[u];
      all_complete &= unit_free[u];
    end
  end
  assign comp = comp_q;

  // does remote completion from device d match a unit already executing?
  function automatic logic match(int d, int u);
    return remote_in_valid[d] && dup_q[u] && !comp_q[u][d] && tag_q[u] == remote_in_tag[d];
  endfunction

  // each remote completion sets the bit of the lowest matching unit
  logic [NUM_UNITS-1:0] rsel [NUM_DEV];
  always_comb begin
    for (int d = 0; d < int'(NUM_DEV); d++) begin
      rsel[d] = '0;
      for (int u = int'(NUM_UNITS) - 1; u >= 0; u--)
        if (match(d, u)) rsel[d] = NUM_UNITS'(1) << u;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < int'(NUM_UNITS); u++) begin
        comp_q[u] <= '1;
        tag_q[u]  <= '0;
      end
      dup_q    <= '0;
      notify_q <= '0;
      for (int d = 0; d < int'(NUM_DEV); d++) early_q[d] <= '0;
    end else begin
      // remote completions
      for (int d = 0; d < int'(NUM_DEV); d++) begin
        if (d != int'(DEV_ID) && remote_in_valid[d]) begin
          for (int u = 0; u < int'(NUM_UNITS); u++)
            if (rsel[d][u]) comp_q[u][d] <= 1'b1;
          if (!(|rsel[d]) && !(start && start_dup && start_tag == remote_in_tag[d]))
            early_q[d][remote_in_tag[d]] <= 1'b1;
        end
      end
      // local completions
      for (int u = 0; u < int'(NUM_UNITS); u++) begin
        if (local_done[u]) begin
          comp_q[u][DEV_ID] <= 1'b1;
          if (dup_q[u]) notify_q[u] <= 1'b1;
        end
      end
      if (nsel_v) notify_q[nsel] <= 1'b0;
      // issue: reset status (the remote bits take any early completion)
      if (start) begin
        tag_q[start_unit] <= start_tag;
        dup_q[start_unit] <= start_dup;
        for (int d = 0; d < int'(NUM_DEV); d++) begin
          if (d == int'(DEV_ID)) begin
            comp_q[start_unit][d] <= 1'b0;
          end else if (!start_dup) begin
            comp_q[start_unit][d] <= 1'b1;
          end else begin
            comp_q[start_unit][d] <= early_q[d][start_tag] ||
                                     (remote_in_valid[d] && remote_in_tag[d] == start_tag);
            early_q[d][start_tag] <= 1'b0;
          end
        end
      end
    end
  end

  // A unit is issued only when it is free.
  a_start_free: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> unit_free[start_unit]);

endmodule
