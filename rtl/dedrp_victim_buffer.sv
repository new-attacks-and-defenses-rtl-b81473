// dedrp_victim_buffer: fully associative buffer for oversubscribed lines.
//
// When every way of a set already holds lines of the same iTable entry as a
// missing line, that entry is oversubscribed: the new line cannot be placed in
// its set without breaking the mapping. Such lines are kept here instead. Every
// access checks the buffer by line address before the cache.
//
// Each slot holds valid, dirty, line address, the iTable entry of the line and
// the line data. Lookup compares all slots against lk_addr. idx_match marks the
// slots whose line belongs to iTable entry match_idx, so the bank can write back
// and drop them when that entry is refreshed. alloc_slot is the slot the next
// insert uses: the lowest free slot, or, when the buffer is full, the slot at a
// round-robin pointer (whose line the bank must write back first). view_slot
// shows one slot's contents for write-back.
//
// Interface and timing: lookup, idx_match and the slot view are combinational;
// insert, update (write hit, sets dirty) and invalidate take effect at the
// clock edge. Reset clears all valid bits.
//
// The buffer and its 32 entries follow the paper; how it is drained and
// replaced is this design's choice.
module dedrp_victim_buffer
  import dedrp_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  localparam int unsigned SLOT_W = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  line_addr_t        lk_addr,
  output logic              lk_hit,
  output logic [SLOT_W-1:0] lk_slot,
  output line_t             lk_data,
  // insert
  input  logic              ins_en,
  input  line_addr_t        ins_addr,
  input  way_idx_t          ins_idx,
  input  line_t             ins_data,
  input  logic              ins_dirty,
  output logic [SLOT_W-1:0] alloc_slot,
  output logic              full,
  // update on a write hit
  input  logic              upd_en,
  input  logic [SLOT_W-1:0] upd_slot,
  input  line_t             upd_data,
  // invalidate
  input  logic              inv_en,
  input  logic [SLOT_W-1:0] inv_slot,
  // slots of one iTable entry
  input  way_idx_t          match_idx,
  output logic [ENTRIES-1:0] idx_match,
  // view of one slot
  input  logic [SLOT_W-1:0] view_slot,
  output logic              view_valid,
  output logic              view_dirty,
  output line_addr_t        view_addr,
  output line_t             view_data,
  output logic [SLOT_W:0]   count
);

  logic [ENTRIES-1:0] valid, dirty;
  line_addr_t         addr [ENTRIES];
  way_idx_t           idx  [ENTRIES];
  line_t              data [ENTRIES];
  logic [SLOT_W-1:0]  rr_ptr;

  always_comb begin
    lk_hit  = 1'b0;
    lk_slot = '0;
    for (int s = 0; s < ENTRIES; s++)
      if (valid[s] && addr[s] == lk_addr) begin
        lk_hit  = 1'b1;
        lk_slot = SLOT_W'(s);
      end
    lk_data = data[lk_slot];
  end

  always_comb begin
    full       = &valid;
    alloc_slot = rr_ptr;
    for (int s = ENTRIES - 1; s >= 0; s--)
      if (!valid[s]) alloc_slot = SLOT_W'(s);
  end

  always_comb begin
    count = '0;
    for (int s = 0; s < ENTRIES; s++) begin
      idx_match[s] = valid[s] && idx[s] == match_idx;
      count        = count + (SLOT_W+1)'(valid[s]);
    end
  end

  assign view_valid = valid[view_slot];
  assign view_dirty = dirty[view_slot];
  assign view_addr  = addr[view_slot];
  assign view_data  = data[view_slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      dirty  <= '0;
      rr_ptr <= '0;
    end else begin
      if (inv_en) valid[inv_slot] <= 1'b0;
      if (upd_en) dirty[upd_slot] <= 1'b1;
      if (ins_en) begin
        valid[alloc_slot] <= 1'b1;
        dirty[alloc_slot] <= ins_dirty;
        if (full) rr_ptr <= rr_ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (upd_en) data[upd_slot] <= upd_data;
    if (ins_en) begin
      addr[alloc_slot] <= ins_addr;
      idx[alloc_slot]  <= ins_idx;
      data[alloc_slot] <= ins_data;
    end
  end

endmodule
