// nearpm_unit: one NearPM execution engine.
//
// Structure as in the paper: a request register holding the command issued by
// the dispatcher, a controller that turns it into control steps, a metadata
// generator, a load/store unit (single lines) and a DMA engine (bulk copies),
// which share the unit's PM port. Commands arrive with physical addresses.
//
//   UNDOLOG_CREATE, CKPOINT_CREATE  copy `size` bytes from src to dst+64, then
//                                   write the header line at dst
//   APPLYLOG, SHADOWCPY             copy `size` bytes from src to dst
//   COMMIT_LOG                      walk the log area [dst, dst+size): read a
//                                   line; if it is a live header, rewrite it as
//                                   deleted and skip its data; stop at the end
//                                   or at the first line that is not a header
//   anything else                   completes at once
//
// The operations are the paper's (its software interface); the log layout and
// the order of steps inside each operation are this design's own. Writing the
// header after the data means a valid header always describes a complete copy.
// `done` pulses for one cycle when every write of the command has been
// acknowledged by PM; `busy` is high from the cycle after req_valid until then.
module nearpm_unit
  import nearpm_pkg::*;
#(
  parameter int unsigned BURST = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  input  req_t     req,
  output logic     busy,
  output logic     done,
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  input  line_t    mem_rsp_rdata
);
  typedef enum logic [3:0] {
    U_IDLE, U_COPY_START, U_COPY_WAIT, U_HDR, U_HDR_WAIT, U_RDH, U_RDH_WAIT, U_CHK,
    U_WRH_WAIT
  } unit_state_e;

  unit_state_e st_q;
  req_t        rr_q;      // request register
  logic [31:0] seq_q;
  addr_t       ptr_q, end_q;

  // metadata generator
  line_t       hdr, del_hdr, rd_line_q;
  logic        in_live;
  logic [31:0] in_size;
  metadata_generator u_mdg (
    .req(rr_q), .obj_pa(rr_q.src), .seq(seq_q), .hdr(hdr),
    .in_hdr(rd_line_q), .del_hdr(del_hdr), .in_live(in_live), .in_size(in_size)
  );

  // load/store unit
  logic     lsu_valid, lsu_we, lsu_busy, lsu_done;
  addr_t    lsu_addr;
  line_t    lsu_wdata, lsu_rdata;
  logic     lsu_mreq_v, dma_mreq_v;
  mem_req_t lsu_mreq, dma_mreq;
  load_store_unit u_lsu (
    .clk, .rst_n, .op_valid(lsu_valid), .op_we(lsu_we), .op_addr(lsu_addr),
    .op_wdata(lsu_wdata), .op_busy(lsu_busy), .op_done(lsu_done), .op_rdata(lsu_rdata),
    .mem_req_valid(lsu_mreq_v), .mem_req_ready(mem_req_ready && lsu_busy), .mem_req(lsu_mreq),
    .mem_rsp_valid(mem_rsp_valid && lsu_busy), .mem_rsp_rdata(mem_rsp_rdata)
  );

  // DMA engine
  logic  dma_start, dma_busy, dma_done;
  addr_t dma_dst;
  dma_engine #(.BURST(BURST)) u_dma (
    .clk, .rst_n, .start(dma_start), .src(rr_q.src), .dst(dma_dst), .bytes(rr_q.size),
    .busy(dma_busy), .done(dma_done),
    .mem_req_valid(dma_mreq_v), .mem_req_ready(mem_req_ready && !lsu_busy), .mem_req(dma_mreq),
    .mem_rsp_valid(mem_rsp_valid && !lsu_busy), .mem_rsp_rdata(mem_rsp_rdata)
  );

  wire with_hdr = (rr_q.op == OP_UNDOLOG_CREATE) || (rr_q.op == OP_CKPOINT_CREATE);
  assign dma_dst = with_hdr ? rr_q.dst + addr_t'(LINE_B) : rr_q.dst;

  assign mem_req_valid = lsu_busy ? lsu_mreq_v : dma_mreq_v;
  assign mem_req       = lsu_busy ? lsu_mreq : dma_mreq;
  assign busy          = (st_q != U_IDLE);

  // controller
  always_comb begin
    dma_start = (st_q == U_COPY_START);
    lsu_valid = 1'b0;
    lsu_we    = 1'b0;
    lsu_addr  = rr_q.dst;
    lsu_wdata = hdr;
    case (st_q)
      U_HDR: begin lsu_valid = 1'b1; lsu_we = 1'b1; end
      U_RDH: if (ptr_q < end_q) begin lsu_valid = 1'b1; lsu_addr = ptr_q; end
      U_CHK: if (in_live) begin
        lsu_valid = 1'b1;
        lsu_we    = 1'b1;
        lsu_addr  = ptr_q;
        lsu_wdata = del_hdr;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= U_IDLE;
      done  <= 1'b0;
      seq_q <= '0;
      rr_q  <= '0;
      ptr_q <= '0;
      end_q <= '0;
      rd_line_q <= '0;
    end else begin
      done <= 1'b0;
      case (st_q)
        U_IDLE: if (req_valid) begin
          rr_q  <= req;
          ptr_q <= req.dst;
          end_q <= req.dst + addr_t'(round_lines(req.size));
          case (req.op)
            OP_UNDOLOG_CREATE, OP_CKPOINT_CREATE, OP_APPLYLOG, OP_SHADOWCPY:
              st_q <= U_COPY_START;
            OP_COMMIT_LOG: st_q <= U_RDH;
            default: done <= 1'b1;
          endcase
        end
        U_COPY_START: st_q <= U_COPY_WAIT;
        U_COPY_WAIT: if (dma_done) begin
          if (with_hdr) st_q <= U_HDR;
          else begin
            st_q <= U_IDLE;
            done <= 1'b1;
          end
        end
        U_HDR: st_q <= U_HDR_WAIT;
        U_HDR_WAIT: if (lsu_done) begin
          seq_q <= seq_q + 1'b1;
          st_q  <= U_IDLE;
          done  <= 1'b1;
        end
        U_RDH: begin
          if (ptr_q < end_q) st_q <= U_RDH_WAIT;
          else begin
            st_q <= U_IDLE;
            done <= 1'b1;
          end
        end
        U_RDH_WAIT: if (lsu_done) begin
          rd_line_q <= lsu_rdata;
          st_q      <= U_CHK;
        end
        U_CHK: begin
          if (in_live) st_q <= U_WRH_WAIT;
          else begin
            st_q <= U_IDLE;
            done <= 1'b1;
          end
        end
        U_WRH_WAIT: if (lsu_done) begin
          ptr_q <= ptr_q + addr_t'(LINE_B) + addr_t'(round_lines(in_size));
          st_q  <= U_RDH;
        end
        default: st_q <= U_IDLE;
      endcase
    end
  end

endmodule
