// pm_mem_model: behavioural model of the PM media behind one NearPM device.
//
// Not synthesizable. Stands in for the emulated persistent memory (FPGA DRAM
// and its controller): a sparse array of 64-byte lines, every request answered
// in order after LATENCY cycles (fully pipelined, one request per cycle); a
// write is applied when accepted and acknowledged LATENCY cycles later; lines
// never written read as zero. 436 ns at 300 MHz is about 131 cycles.
// Testbenches use peek/poke to preload and inspect memory, and `n_reads`,
// `n_writes` to count traffic. `ready_pct` lets a test throttle acceptance.
module pm_mem_model
  import nearpm_pkg::*;
#(
  parameter int unsigned LATENCY = 131
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output line_t    rsp_rdata
);
  line_t mem [logic [57:0]];
  int unsigned ready_pct = 100;
  int unsigned n_reads = 0, n_writes = 0;

  typedef struct {
    longint unsigned due;
    line_t           data;
  } pend_t;
  pend_t q[$];
  longint unsigned cyc = 0;

  function automatic line_t peek(addr_t a);
    return mem.exists(a[63:6]) ? mem[a[63:6]] : '0;
  endfunction
  function automatic void poke(addr_t a, line_t d);
    mem[a[63:6]] = d;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) req_ready <= 1'b1;
    else req_ready <= ($urandom_range(99) < ready_pct);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid && req_ready) begin
        pend_t p;
        p.due = cyc + 64'(LATENCY);
        if (req.we) begin
          mem[req.addr[63:6]] = req.wdata;
          p.data = '0;
          n_writes++;
        end else begin
          p.data = peek(req.addr);
          n_reads++;
        end
        q.push_back(p);
      end
      if (q.size() > 0 && q[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q[0].data;
        void'(q.pop_front());
      end
    end
  end

endmodule
