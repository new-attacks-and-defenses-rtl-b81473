// dedrp_itable: the indirection table (iTable).
//
// Each of the ENTRIES entries holds a refresh bit and the set mapping, i.e.
// the cache set in which the lines mapped by this entry live. An access reads
// two entries, i (selected with the current key) and j (target key); a miss
// that evicts an entry's lines, or the cleaner, writes one entry back with a
// new random set mapping.
//
// Entry layout: {refresh bit, set mapping[SET_W-1:0]}, log2(S)+1 bits as the
// paper counts it. The meaning of the refresh bit against the epoch phase is
// decided by dedrp_key_select.
//
// Interface and timing: two synchronous read ports (data one cycle after the
// index) and one synchronous write port. A read of an entry written in the
// same cycle returns the old contents. There is no reset: the bank's init
// sequence writes every entry after reset.
module dedrp_itable #(
  parameter int unsigned ENTRIES = 32768,
  parameter int unsigned SET_W   = 11,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic [IDX_W-1:0] ra_idx,
  output logic [SET_W:0]   ra_entry,
  input  logic [IDX_W-1:0] rb_idx,
  output logic [SET_W:0]   rb_entry,
  input  logic             we,
  input  logic [IDX_W-1:0] w_idx,
  input  logic [SET_W:0]   w_entry
);

  logic [SET_W:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    ra_entry <= mem[ra_idx];
    rb_entry <= mem[rb_idx];
    if (we) mem[w_idx] <= w_entry;
  end

endmodule
