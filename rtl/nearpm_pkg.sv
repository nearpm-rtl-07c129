// nearpm_pkg: types and constants shared by every NearPM block.
//
// A NearPM command is one 64-byte line written by the host to the device's
// command channel (32 such lines fill the 2 kB request FIFO). Its fields follow
// the request layout of the ordering figure (OP, src addr, dest addr, data
// size, other) and the argument lists of the software interface (pool id,
// thread id, pointer, size); the bit positions and the opcode values are this
// design's own. All data movement is in 64-byte lines: the PM port, the host
// queue entries and the log headers are one line wide.
package nearpm_pkg;

  localparam int unsigned ADDR_W    = 64;   // virtual and physical byte addresses
  localparam int unsigned LINE_W    = 512;  // one 64-byte line
  localparam int unsigned LINE_B    = 64;
  localparam int unsigned REQ_W     = 512;  // one command = one line
  localparam int unsigned TAG_W     = 8;    // command tag used by cross-device sync
  localparam int unsigned STAMP_W   = 8;    // arrival stamp shared by the two queues

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LINE_W-1:0] line_t;

  // Operations of the software interface table, plus pool registration.
  typedef enum logic [7:0] {
    OP_NOP            = 8'h00,
    OP_UNDOLOG_CREATE = 8'h01,  // header + copy old data to an undo log
    OP_APPLYLOG       = 8'h02,  // copy a redo log to the original location
    OP_COMMIT_LOG     = 8'h03,  // delete (invalidate) the logs of a transaction
    OP_CKPOINT_CREATE = 8'h04,  // header + copy existing data to a checkpoint
    OP_SHADOWCPY      = 8'h05,  // copy a page before update
    OP_SET_POOL       = 8'h10   // register a pool's translation offset
  } op_e;

  localparam logic [7:0] FLAG_DUP = 8'h01;  // command duplicated to all devices

  // 512-bit command. src/dst hold virtual addresses from the host and physical
  // addresses after the dispatcher has translated them. For OP_SET_POOL the
  // offset to store is carried in src.
  typedef struct packed {
    logic [303:0] rsvd;
    addr_t        dst;
    addr_t        src;
    logic [31:0]  size;       // bytes
    logic [15:0]  tag;        // low TAG_W bits used for cross-device matching
    logic [7:0]   flags;
    logic [7:0]   thread_id;
    logic [7:0]   pool_id;
    op_e          op;
  } req_t;

  // Host load/store carried by the host read/write queue.
  typedef struct packed {
    logic  we;
    addr_t addr;
    line_t data;
  } host_acc_t;

  // One request on a PM port (line granularity). Every request, read or
  // write, gets exactly one response; a write's response means it is in PM.
  typedef struct packed {
    logic  we;
    addr_t addr;
    line_t wdata;
  } mem_req_t;

  // Byte range [lo, hi). Empty when hi <= lo.
  typedef struct packed {
    addr_t lo;
    addr_t hi;
  } range_t;

  function automatic logic overlap(range_t a, range_t b);
    return (a.lo < a.hi) && (b.lo < b.hi) && (a.lo < b.hi) && (b.lo < a.hi);
  endfunction

  function automatic logic [31:0] round_lines(logic [31:0] bytes);
    return (bytes + 32'(LINE_B - 1)) & ~32'(LINE_B - 1);
  endfunction

  // Stamp a is older than stamp b (modular, window < 2^(STAMP_W-1)).
  function automatic logic older(logic [STAMP_W-1:0] a, logic [STAMP_W-1:0] b);
    logic [STAMP_W-1:0] d;
    d = a - b;
    return d[STAMP_W-1];
  endfunction

  // Log / checkpoint header line produced by the metadata generator.
  localparam logic [31:0] HDR_MAGIC = 32'h4E504D4C;  // "NPML"
  typedef struct packed {
    logic [295:0] rsvd;
    logic [31:0]  seq;
    addr_t        obj_addr;   // physical address of the logged object
    logic [31:0]  size;
    logic [15:0]  tag;
    logic [7:0]   thread_id;
    logic [7:0]   pool_id;
    logic [7:0]   op;
    logic [6:0]   pad;
    logic         committed;
    logic [6:0]   pad2;
    logic         valid;
    logic [31:0]  magic;
  } log_hdr_t;

  // Read and write byte ranges of a (translated) command, as kept in the
  // in-flight access table.
  function automatic range_t rd_range(req_t r);
    range_t x;
    x.lo = r.src;
    x.hi = r.src;
    case (r.op)
      OP_UNDOLOG_CREATE, OP_CKPOINT_CREATE, OP_APPLYLOG, OP_SHADOWCPY:
        x.hi = r.src + addr_t'(round_lines(r.size));
      OP_COMMIT_LOG: begin
        x.lo = r.dst;
        x.hi = r.dst + addr_t'(round_lines(r.size));
      end
      default: ;
    endcase
    return x;
  endfunction

  function automatic range_t wr_range(req_t r);
    range_t x;
    x.lo = r.dst;
    x.hi = r.dst;
    case (r.op)
      OP_UNDOLOG_CREATE, OP_CKPOINT_CREATE:
        x.hi = r.dst + addr_t'(LINE_B) + addr_t'(round_lines(r.size));
      OP_APPLYLOG, OP_SHADOWCPY, OP_COMMIT_LOG:
        x.hi = r.dst + addr_t'(round_lines(r.size));
      default: ;
    endcase
    return x;
  endfunction

endpackage
