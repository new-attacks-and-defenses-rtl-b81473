// dedrp_cleaner: scan pointer of the cleaner.
//
// Natural evictions transition iTable entries in random order, so some may be
// left untransitioned near the end of an epoch. The cleaner walks the table
// from entry 0 to ENTRIES-1 during the second half of the epoch; the bank
// examines the entry at ptr after each normal access and, if it has not
// transitioned, evicts its lines and refreshes it. When the last entry has
// been examined, done is set and stays set until restart (the key swap).
//
// Interface and timing: step advances ptr at the clock edge; restart (taking
// precedence) clears ptr and done. Reset clears both.
//
// The cleaner's role and its one-step-per-access pace follow the paper; the
// in-order scan is this design's choice.
module dedrp_cleaner #(
  parameter int unsigned ENTRIES = 32768,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  input  logic             restart,
  output logic [IDX_W-1:0] ptr,
  output logic             done
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr  <= '0;
      done <= 1'b0;
    end else if (restart) begin
      ptr  <= '0;
      done <= 1'b0;
    end else if (step && !done) begin
      ptr <= ptr + 1'b1;
      if (ptr == IDX_W'(ENTRIES - 1)) done <= 1'b1;
    end
  end

endmodule
