// metadata_generator: builds and deletes log/checkpoint headers.
//
// Logging and checkpointing both "generate metadata" and logging also
// "deletes the log" (the paper's list of common primitives). This block is the
// combinational part of a NearPM unit that does both:
//   * hdr: the 64-byte header written in front of an undo-log or checkpoint
//     entry - magic word, valid bit, committed bit, opcode, pool, thread, tag,
//     size, physical address of the logged object and a sequence number;
//   * del_hdr: a header read back from a log, rewritten as deleted (valid
//     cleared, committed set), and in_live: the line read is a live header.
// The paper gives examples of such metadata (object ID, commit status, offset)
// but no layout; the layout in nearpm_pkg::log_hdr_t is this design's own.
// Most output bits are command fields or read-back fields placed into the
// header format, so after synthesis they are wires from inputs or constants;
// the logic is the magic compare and the valid/committed rewrite.
module metadata_generator
  import nearpm_pkg::*;
(
  input  req_t        req,
  input  addr_t       obj_pa,
  input  logic [31:0] seq,
  output line_t       hdr,
  input  line_t       in_hdr,
  output line_t       del_hdr,
  output logic        in_live,
  output logic [31:0] in_size
);
  log_hdr_t h, i, d;

  always_comb begin
    h           = '0;
    h.magic     = HDR_MAGIC;
    h.valid     = 1'b1;
    h.committed = 1'b0;
    h.op        = req.op;
    h.pool_id   = req.pool_id;
    h.thread_id = req.thread_id;
    h.tag       = req.tag;
    h.size      = req.size;
    h.obj_addr  = obj_pa;
    h.seq       = seq;
    hdr         = line_t'(h);

    i           = log_hdr_t'(in_hdr);
    in_live     = (i.magic == HDR_MAGIC) && i.valid;
    in_size     = i.size;
    d           = i;
    d.valid     = 1'b0;
    d.committed = 1'b1;
    del_hdr     = line_t'(d);
  end

endmodule
