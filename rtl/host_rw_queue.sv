// host_rw_queue: the host read/write queue of a NearPM device.
//
// Regular loads and stores from the host CPU enter here and leave in order,
// one per cycle, when the dispatcher's buffer-enable logic lets the head go
// (head_go): a host access that touches a range an in-flight or older pending
// NearPM command is using waits at the head until that command completes. The
// queue holds 4 kB of data (64 entries of one 64-byte line), as in the paper,
// and is part of the persistence domain. Each entry also keeps an arrival
// stamp shared with the request FIFO, so ordering checks only consider
// commands that arrived earlier; the stamps and the strict in-order service
// are this design's choices.
//
// Interface: valid/ready push (in_*); head_valid/head_acc/head_stamp show the
// oldest access, head_go pops it. All entries are visible for the dispatcher's
// check of pending commands against older host writes.
module host_rw_queue
  import nearpm_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  host_acc_t           in_acc,
  input  logic [STAMP_W-1:0]  in_stamp,
  output logic                head_valid,
  output host_acc_t           head_acc,
  output logic [STAMP_W-1:0]  head_stamp,
  input  logic                head_go,
  output logic [DEPTH-1:0]    ent_valid,
  output host_acc_t           ent_acc   [DEPTH],
  output logic [STAMP_W-1:0]  ent_stamp [DEPTH]
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  host_acc_t          mem_q   [DEPTH];
  logic [STAMP_W-1:0] stamp_q [DEPTH];
  logic [DEPTH-1:0]   vld_q;
  logic [PW-1:0]      rd_ptr, wr_ptr;

  wire push = in_valid && in_ready;
  wire pop  = head_valid && head_go;

  assign in_ready   = !vld_q[wr_ptr];
  assign head_valid = vld_q[rd_ptr];
  assign head_acc   = mem_q[rd_ptr];
  assign head_stamp = stamp_q[rd_ptr];
  assign ent_valid  = vld_q;
  assign ent_acc    = mem_q;
  assign ent_stamp  = stamp_q;

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
      mem_q[wr_ptr]   <= in_acc;
      stamp_q[wr_ptr] <= in_stamp;
    end
  end

endmodule
