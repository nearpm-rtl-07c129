// load_store_unit: fine-grained PM access for a NearPM unit.
//
// Performs one 64-byte read or write at a time for the unit's controller:
// header writes, and header reads and rewrites while deleting logs. A request
// (op_valid with op_we/op_addr/op_wdata, held for one cycle) is sent on the PM
// port as soon as the port is ready; op_done pulses when PM answers, with the
// read data on op_rdata. A write is done only when PM acknowledges it, so the
// data is then in the persistence domain. The single-outstanding-access
// handshake is this design's own; the paper names the unit and its role only.
// op_rdata is the PM read data passed straight through (valid with op_done),
// so those output bits are wires after synthesis.
module load_store_unit
  import nearpm_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     op_valid,
  input  logic     op_we,
  input  addr_t    op_addr,
  input  line_t    op_wdata,
  output logic     op_busy,
  output logic     op_done,
  output line_t    op_rdata,
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  input  line_t    mem_rsp_rdata
);
  typedef enum logic [1:0] {L_IDLE, L_REQ, L_WAIT} lsu_state_e;
  lsu_state_e st_q;
  mem_req_t   req_q;

  assign mem_req_valid = (st_q == L_REQ);
  assign mem_req       = req_q;
  assign op_busy       = (st_q != L_IDLE);
  assign op_done       = (st_q == L_WAIT) && mem_rsp_valid;
  assign op_rdata      = mem_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= L_IDLE;
    end else begin
      case (st_q)
        L_IDLE: if (op_valid) st_q <= L_REQ;
        L_REQ:  if (mem_req_ready) st_q <= L_WAIT;
        L_WAIT: if (mem_rsp_valid) st_q <= L_IDLE;
        default: st_q <= L_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st_q == L_IDLE && op_valid) begin
      req_q.we    <= op_we;
      req_q.addr  <= {op_addr[ADDR_W-1:6], 6'd0};
      req_q.wdata <= op_wdata;
    end
  end

  a_no_req_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    op_valid |-> st_q == L_IDLE);

endmodule
