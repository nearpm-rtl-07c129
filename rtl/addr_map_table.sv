// addr_map_table: pool-indexed virtual-to-physical address translation.
//
// PM libraries place persistent data in pools, so translating a pool's base is
// enough to translate any address inside it. When a pool is created the host
// registers the pool's offset (physical base minus virtual base) under the key
// {pool_id, thread_id}; the dispatcher then translates a command's virtual
// operand by adding the offset stored for its key. This follows the paper's
// translation scheme; the 432-byte capacity is the paper's, split here into
// 48 fully associative entries of a 16-bit key and a 56-bit signed offset
// (9 bytes each). A write to a key already present overwrites it; a new key
// takes the lowest free entry; a write to a full table is dropped and sets
// `full`. Lookup is combinational, for two addresses at once (source and
// destination operands); a miss gives lk_hit = 0 and the addresses unchanged.
// A second lookup port (lk2_*) translates commands as they arrive, so the
// host-side ordering check can compare pending commands with physical host
// addresses; the dispatcher uses the first port.
module addr_map_table
  import nearpm_pkg::*;
#(
  parameter int unsigned ENTRIES = 48,
  parameter int unsigned OFF_W   = 56
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [15:0] wr_key,
  input  addr_t       wr_off,
  input  logic [15:0] lk_key,
  input  addr_t       lk_va0,
  input  addr_t       lk_va1,
  output logic        lk_hit,
  output addr_t       lk_pa0,
  output addr_t       lk_pa1,
  input  logic [15:0] lk2_key,
  input  addr_t       lk2_va0,
  input  addr_t       lk2_va1,
  output addr_t       lk2_pa0,
  output addr_t       lk2_pa1,
  output logic        full
);
  logic [ENTRIES-1:0] vld_q;
  logic [15:0]        key_q [ENTRIES];
  logic [OFF_W-1:0]   off_q [ENTRIES];

  // lookup: the offset of the matching entry, or 0 on a miss
  function automatic addr_t find(logic [15:0] key, output logic hit);
    addr_t off;
    hit = 1'b0;
    off = '0;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (vld_q[i] && key_q[i] == key && !hit) begin
        hit = 1'b1;
        off = addr_t'(signed'(off_q[i]));
      end
    end
    return off;
  endfunction

  addr_t off_sel, off2_sel;
  logic  hit2_unused;
  always_comb begin
    off_sel  = find(lk_key, lk_hit);
    off2_sel = find(lk2_key, hit2_unused);
    lk_pa0   = lk_va0 + off_sel;
    lk_pa1   = lk_va1 + off_sel;
    lk2_pa0  = lk2_va0 + off2_sel;
    lk2_pa1  = lk2_va1 + off2_sel;
  end

  // write: existing key or lowest free slot
  logic                       w_hit, w_free;
  logic [$clog2(ENTRIES)-1:0] w_idx;
  always_comb begin
    w_hit  = 1'b0;
    w_free = 1'b0;
    w_idx  = '0;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (vld_q[i] && key_q[i] == wr_key && !w_hit) begin
        w_hit = 1'b1;
        w_idx = i[$clog2(ENTRIES)-1:0];
      end
    end
    if (!w_hit) begin
      for (int i = int'(ENTRIES) - 1; i >= 0; i--) begin
        if (!vld_q[i]) begin
          w_free = 1'b1;
          w_idx  = i[$clog2(ENTRIES)-1:0];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      full  <= 1'b0;
    end else if (wr_en) begin
      if (w_hit || w_free) vld_q[w_idx] <= 1'b1;
      else                 full <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && (w_hit || w_free)) begin
      key_q[w_idx] <= wr_key;
      off_q[w_idx] <= wr_off[OFF_W-1:0];
    end
  end

endmodule
