// nearpm_system: two interleaved NearPM devices, the paper's main setup.
//
// A persistent object can be interleaved over several PM devices, each with
// its own NearPM device. The host's memory controllers send a command on such
// an object to every device (each device's command carries its own part of the
// address range and the duplicate flag), and each device tells the others
// when its part is complete. This top instantiates NUM_DEV devices (two, with
// four NearPM units each, as in the paper's prototype) and connects every
// device's completion output to the completion inputs of all devices; in the
// paper these notices travel through the CPU's memory controllers, here they
// are direct wires. Command channels, host channels and PM ports stay
// per-device ports: the host, its memory controllers and the PM media are
// outside this design.
module nearpm_system
  import nearpm_pkg::*;
#(
  parameter int unsigned NUM_DEV   = 2,
  parameter int unsigned NUM_UNITS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_DEV-1:0]   cmd_valid,
  output logic [NUM_DEV-1:0]   cmd_ready,
  input  req_t                 cmd_req        [NUM_DEV],
  input  logic [NUM_DEV-1:0]   host_valid,
  output logic [NUM_DEV-1:0]   host_ready,
  input  host_acc_t            host_acc       [NUM_DEV],
  output logic [NUM_DEV-1:0]   host_rsp_valid,
  output line_t                host_rsp_rdata [NUM_DEV],
  output logic [NUM_DEV-1:0]   pm_req_valid,
  input  logic [NUM_DEV-1:0]   pm_req_ready,
  output mem_req_t             pm_req         [NUM_DEV],
  input  logic [NUM_DEV-1:0]   pm_rsp_valid,
  input  line_t                pm_rsp_rdata   [NUM_DEV],
  output logic [NUM_DEV-1:0]   all_complete,
  output logic [NUM_DEV-1:0]   sync_state     [NUM_DEV][NUM_UNITS],
  output logic [NUM_UNITS-1:0] units_busy     [NUM_DEV],
  output logic [31:0]          n_issued       [NUM_DEV],
  output logic [31:0]          n_stall_conflict [NUM_DEV],
  output logic [31:0]          n_stall_host   [NUM_DEV],
  output logic [31:0]          n_stall_unit   [NUM_DEV],
  output logic [31:0]          n_host_blocked [NUM_DEV],
  output logic [31:0]          n_set_pool     [NUM_DEV],
  output logic [NUM_DEV-1:0]   amt_full
);
  logic [NUM_DEV-1:0] rvalid;
  logic [TAG_W-1:0]   rtag [NUM_DEV];

  for (genvar d = 0; d < int'(NUM_DEV); d++) begin : g_dev
    nearpm_device #(.NUM_UNITS(NUM_UNITS), .NUM_DEV(NUM_DEV), .DEV_ID(d)) u_dev (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[d]), .cmd_ready(cmd_ready[d]), .cmd_req(cmd_req[d]),
      .host_valid(host_valid[d]), .host_ready(host_ready[d]), .host_acc(host_acc[d]),
      .host_rsp_valid(host_rsp_valid[d]), .host_rsp_rdata(host_rsp_rdata[d]),
      .pm_req_valid(pm_req_valid[d]), .pm_req_ready(pm_req_ready[d]), .pm_req(pm_req[d]),
      .pm_rsp_valid(pm_rsp_valid[d]), .pm_rsp_rdata(pm_rsp_rdata[d]),
      .remote_in_valid(rvalid), .remote_in_tag(rtag),
      .remote_out_valid(rvalid[d]), .remote_out_tag(rtag[d]),
      .sync_state(sync_state[d]), .all_complete(all_complete[d]), .units_busy(units_busy[d]),
      .n_issued(n_issued[d]), .n_stall_conflict(n_stall_conflict[d]),
      .n_stall_host(n_stall_host[d]), .n_stall_unit(n_stall_unit[d]),
      .n_host_blocked(n_host_blocked[d]), .n_set_pool(n_set_pool[d]), .amt_full(amt_full[d])
    );
  end

endmodule
