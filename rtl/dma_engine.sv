// dma_engine: bulk PM-to-PM copy for a NearPM unit.
//
// Copies `bytes` bytes (rounded up to whole 64-byte lines) from `src` to `dst`
// inside the device's PM, as used for copying old data to a log or checkpoint,
// applying a redo log and shadow-copying a page. The paper calls this the DMA
// engine for large data movement; how it works is this design's choice: it
// reads a burst of up to BURST lines back to back into a line buffer (keeping
// several reads in flight to hide the PM latency), then writes the burst out,
// and repeats. `done` pulses for one cycle once every write has been
// acknowledged, so the copy is then persistent. Addresses are taken as
// 64-byte aligned; scatter-gather is not supported, as in the paper.
//
// Interface: start (one cycle, while !busy) with src/dst/bytes; PM port with
// valid/ready requests and in-order responses. A copy of L lines takes about
// ceil(L/BURST) * (2*BURST + 2*latency) cycles.
module dma_engine
  import nearpm_pkg::*;
#(
  parameter int unsigned BURST = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       src,
  input  addr_t       dst,
  input  logic [31:0] bytes,
  output logic        busy,
  output logic        done,
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_rsp_valid,
  input  line_t       mem_rsp_rdata
);
  localparam int unsigned BW = $clog2(BURST + 1);

  typedef enum logic [1:0] {D_IDLE, D_READ, D_WRITE} dma_state_e;
  dma_state_e  st_q;
  addr_t       src_q, dst_q;
  logic [25:0] left_q;             // lines not yet read
  logic [BW-1:0] n_q;              // lines in this burst
  logic [BW-1:0] iss_q, rsp_q;     // issued / answered in this phase
  line_t       buf_q [BURST];

  wire fire = mem_req_valid && mem_req_ready;

  assign busy          = (st_q != D_IDLE);
  assign mem_req_valid = (st_q != D_IDLE) && (iss_q < n_q);
  always_comb begin
    mem_req.we    = (st_q == D_WRITE);
    mem_req.addr  = (st_q == D_WRITE) ? dst_q + addr_t'({iss_q, 6'd0})
                                      : src_q + addr_t'({iss_q, 6'd0});
    mem_req.wdata = buf_q[iss_q[$clog2(BURST)-1:0]];
  end

  function automatic logic [BW-1:0] burst_of(logic [25:0] lines);
    return (lines > 26'(BURST)) ? BW'(BURST) : BW'(lines);
  endfunction

  wire [25:0] start_lines = 26'(round_lines(bytes) >> 6);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= D_IDLE;
      done   <= 1'b0;
      iss_q  <= '0;
      rsp_q  <= '0;
      n_q    <= '0;
      left_q <= '0;
      src_q  <= '0;
      dst_q  <= '0;
    end else begin
      done <= 1'b0;
      case (st_q)
        D_IDLE: if (start) begin
          src_q  <= {src[ADDR_W-1:6], 6'd0};
          dst_q  <= {dst[ADDR_W-1:6], 6'd0};
          iss_q  <= '0;
          rsp_q  <= '0;
          if (start_lines == 0) begin
            done <= 1'b1;
          end else begin
            n_q    <= burst_of(start_lines);
            left_q <= start_lines - 26'(burst_of(start_lines));
            st_q   <= D_READ;
          end
        end
        D_READ: begin
          if (fire) iss_q <= iss_q + 1'b1;
          if (mem_rsp_valid) begin
            rsp_q <= rsp_q + 1'b1;
            if (rsp_q + 1'b1 == n_q) begin
              st_q  <= D_WRITE;
              iss_q <= '0;
              rsp_q <= '0;
            end
          end
        end
        D_WRITE: begin
          if (fire) iss_q <= iss_q + 1'b1;
          if (mem_rsp_valid) begin
            rsp_q <= rsp_q + 1'b1;
            if (rsp_q + 1'b1 == n_q) begin
              iss_q <= '0;
              rsp_q <= '0;
              src_q <= src_q + addr_t'({n_q, 6'd0});
              dst_q <= dst_q + addr_t'({n_q, 6'd0});
              if (left_q == 0) begin
                st_q <= D_IDLE;
                done <= 1'b1;
              end else begin
                n_q    <= burst_of(left_q);
                left_q <= left_q - 26'(burst_of(left_q));
                st_q   <= D_READ;
              end
            end
          end
        end
        default: st_q <= D_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st_q == D_READ && mem_rsp_valid)
      buf_q[rsp_q[$clog2(BURST)-1:0]] <= mem_rsp_rdata;
  end

endmodule
