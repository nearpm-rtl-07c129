// request_fifo: the NearPM request FIFO.
//
// Holds the 64-byte commands written by the host to the device's command
// channel until the dispatcher takes them, in arrival order. Depth (32) and
// entry size (64 B, 2 kB in all) follow the paper's prototype; it is one of the
// structures kept in the persistence domain. Besides the head, every entry and
// its arrival stamp are visible, so the host queue can look up pending commands
// that are older than a host access (the "in-flight and pending accesses
// lookup" of the ordering scheme). For that lookup each entry also keeps the
// physical read and write ranges of its command (in_prd/in_pwr), computed by
// the device when the command arrives; the command itself stays virtual and is
// translated again by the dispatcher. Keeping these ranges is this design's
// choice.
//
// Interface: valid/ready push (in_*), valid/ready pop (out_*). A push is
// accepted when the FIFO is not full, a pop when it is not empty; both can
// happen in the same cycle. The head is registered: a pushed command can be
// popped the next cycle. Reset empties it. The circular-buffer organisation is
// this design's own.
module request_fifo
  import nearpm_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  req_t                in_req,
  input  logic [STAMP_W-1:0]  in_stamp,
  input  range_t              in_prd,
  input  range_t              in_pwr,
  output logic                out_valid,
  input  logic                out_ready,
  output req_t                out_req,
  output logic [STAMP_W-1:0]  out_stamp,
  output logic [DEPTH-1:0]    ent_valid,
  output req_t                ent_req   [DEPTH],
  output logic [STAMP_W-1:0]  ent_stamp [DEPTH],
  output range_t              ent_prd   [DEPTH],
  output range_t              ent_pwr   [DEPTH],
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  req_t               mem_q   [DEPTH];
  logic [STAMP_W-1:0] stamp_q [DEPTH];
  range_t             prd_q   [DEPTH];
  range_t             pwr_q   [DEPTH];
  logic [DEPTH-1:0]   vld_q;
  logic [PW-1:0]      rd_ptr, wr_ptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = !vld_q[wr_ptr];
  assign out_valid = vld_q[rd_ptr];
  assign out_req   = mem_q[rd_ptr];
  assign out_stamp = stamp_q[rd_ptr];
  assign ent_valid = vld_q;
  assign ent_req   = mem_q;
  assign ent_stamp = stamp_q;
  assign ent_prd   = prd_q;
  assign ent_pwr   = pwr_q;

  always_comb begin
    count = '0;
    for (int i = 0; i < int'(DEPTH); i++) count += vld_q[i];
  end

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q  <= '0;
      rd_ptr <= '0;
      wr_ptr <= '0;
    end else begin
      if (push) begin
        vld_q[wr_ptr] <= 1'b1;
        wr_ptr        <= inc(wr_ptr);
      end
      if (pop) begin
        vld_q[rd_ptr] <= 1'b0;
        rd_ptr        <= inc(rd_ptr);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      mem_q[wr_ptr]   <= in_req;
      stamp_q[wr_ptr] <= in_stamp;
      prd_q[wr_ptr]   <= in_prd;
      pwr_q[wr_ptr]   <= in_pwr;
    end
  end

endmodule
