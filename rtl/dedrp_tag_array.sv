// dedrp_tag_array: tag and metadata store of the cache bank.
//
// One row per set holds, for each of the WAYS ways, the valid and dirty bits,
// the full line address (tag) and the iTable entry that placed the line. The
// whole row is read at once so the tag compare and the replacement policy see
// every way; the bank writes a whole row back after changing it.
//
// Interface and timing: synchronous read (row one cycle after rd_set) and
// synchronous write of a full row. A read of a row written in the same cycle
// returns the old row. No reset: the bank's init sequence clears every row.
module dedrp_tag_array
  import dedrp_pkg::*;
#(
  parameter int unsigned SETS = 2048,
  parameter int unsigned WAYS = 8,
  localparam int unsigned SET_W = $clog2(SETS)
) (
  input  logic             clk,
  input  logic [SET_W-1:0] rd_set,
  output way_meta_t        rd_row [WAYS],
  input  logic             we,
  input  logic [SET_W-1:0] wr_set,
  input  way_meta_t        wr_row [WAYS]
);

  way_meta_t mem [SETS][WAYS];

  always_ff @(posedge clk) begin
    rd_row <= mem[rd_set];
    if (we) mem[wr_set] <= wr_row;
  end

endmodule
