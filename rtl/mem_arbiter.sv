// mem_arbiter: shares a device's PM port among its requesters.
//
// In the paper the NearPM units reach PM over an internal AXI bus and the host
// queue has its own path to the PM media. Here both meet at this arbiter, the
// only port to the PM media of the device: requesters 0..N-2 are the NearPM
// units and N-1 the host read/write queue. Each cycle at most one request is
// granted, round-robin, and its requester index is pushed into an order FIFO;
// PM answers requests in order, so each response is routed to the requester at
// the head of that FIFO. At most MAX_OUT requests may be outstanding. The
// round-robin policy, the in-order responses and the 64-byte width are this
// design's choices, standing in for the AXI interconnect. The response data
// is shared by all requesters (only the valid is routed), so rsp_rdata is a
// wire from pm_rsp_rdata.
module mem_arbiter
  import nearpm_pkg::*;
#(
  parameter int unsigned N       = 5,
  parameter int unsigned MAX_OUT = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   req_valid,
  output logic [N-1:0]   req_ready,
  input  mem_req_t       req [N],
  output logic [N-1:0]   rsp_valid,
  output line_t          rsp_rdata,
  output logic           pm_req_valid,
  input  logic           pm_req_ready,
  output mem_req_t       pm_req,
  input  logic           pm_rsp_valid,
  input  line_t          pm_rsp_rdata
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned OW = $clog2(MAX_OUT);

  logic [IW-1:0] rr_q;        // highest priority this cycle
  logic [IW-1:0] gnt;
  logic          gnt_v;
  logic [IW-1:0] ord_q [MAX_OUT];
  logic [OW-1:0] ord_wr, ord_rd;
  logic [OW:0]   ord_cnt;

  wire ord_full = (ord_cnt == (OW+1)'(MAX_OUT));

  always_comb begin
    gnt_v = 1'b0;
    gnt   = '0;
    for (int k = 0; k < int'(N); k++) begin
      int i;
      i = (int'(rr_q) + k) % int'(N);
      if (!gnt_v && req_valid[i]) begin
        gnt_v = 1'b1;
        gnt   = IW'(i);
      end
    end
  end

  assign pm_req_valid = gnt_v && !ord_full;
  assign pm_req       = req[gnt];
  always_comb begin
    req_ready = '0;
    if (gnt_v && !ord_full) req_ready[gnt] = pm_req_ready;
  end

  wire fire = pm_req_valid && pm_req_ready;

  always_comb begin
    rsp_valid = '0;
    if (pm_rsp_valid) rsp_valid[ord_q[ord_rd]] = 1'b1;
  end
  assign rsp_rdata = pm_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q    <= '0;
      ord_wr  <= '0;
      ord_rd  <= '0;
      ord_cnt <= '0;
    end else begin
      if (fire) begin
        rr_q   <= (gnt == IW'(N - 1)) ? '0 : gnt + 1'b1;
        ord_wr <= ord_wr + 1'b1;
      end
      if (pm_rsp_valid) ord_rd <= ord_rd + 1'b1;
      ord_cnt <= ord_cnt + (OW+1)'(fire) - (OW+1)'(pm_rsp_valid);
    end
  end

  always_ff @(posedge clk) begin
    if (fire) ord_q[ord_wr] <= gnt;
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    pm_rsp_valid |-> ord_cnt != 0);

endmodule
