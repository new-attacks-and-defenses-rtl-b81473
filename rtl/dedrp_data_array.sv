// dedrp_data_array: line data store of the cache bank.
//
// SETS x WAYS lines of 64 bytes, addressed by {set, way}. Stands in for the
// data SRAM macros of the bank.
//
// Interface and timing: one port; a read returns the line one cycle after
// the address; a write (we) stores wdata at the clock edge, and its read data
// that cycle is the old line. Contents are not reset: a way is only read after
// the bank has filled it.
module dedrp_data_array
  import dedrp_pkg::*;
#(
  parameter int unsigned SETS = 2048,
  parameter int unsigned WAYS = 8,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic [SET_W-1:0] set,
  input  logic [WAY_W-1:0] way,
  input  logic             we,
  input  line_t            wdata,
  output line_t            rdata
);

  line_t mem [SETS*WAYS];

  always_ff @(posedge clk) begin
    rdata <= mem[{set, way}];
    if (we) mem[{set, way}] <= wdata;
  end

endmodule
