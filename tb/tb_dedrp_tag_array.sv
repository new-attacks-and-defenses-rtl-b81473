// tb_dedrp_tag_array: checks the tag store at 16 sets x 4 ways: rows written
// with random metadata read back, one cycle after the address, equal to a
// reference copy kept here; a read of a row written in the same cycle
// returns the old row.
module tb_dedrp_tag_array;
  import dedrp_pkg::*;
  localparam int unsigned SETS = 16, WAYS = 4, SET_W = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [SET_W-1:0] rs, ws;
  logic we;
  way_meta_t rrow [WAYS];
  way_meta_t wrow [WAYS];
  way_meta_t model [SETS][WAYS];
  int checks = 0, failures = 0;

  dedrp_tag_array #(.SETS(SETS), .WAYS(WAYS)) dut (
    .clk, .rd_set(rs), .rd_row(rrow), .we, .wr_set(ws), .wr_row(wrow));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic way_meta_t rand_meta();
    way_meta_t m;
    m = '{valid: 1'($urandom()), dirty: 1'($urandom()), tag: line_addr_t'({$urandom(), $urandom()}),
          idx: 16'($urandom())};
    return m;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    way_meta_t exp_row [WAYS];
    we = 0; rs = 0; ws = 0;
    for (int w = 0; w < WAYS; w++) wrow[w] = '0;
    for (int s = 0; s < SETS; s++) begin
      we <= 1; ws <= SET_W'(s);
      for (int w = 0; w < WAYS; w++) begin
        model[s][w] = rand_meta();
        wrow[w] <= model[s][w];
      end
      @(posedge clk);
    end
    for (int n = 0; n < 2000; n++) begin
      we <= 1'($urandom_range(1)); ws <= SET_W'($urandom()); rs <= SET_W'($urandom());
      for (int w = 0; w < WAYS; w++) wrow[w] <= rand_meta();
      #1;
      exp_row = model[rs];
      @(posedge clk);
      if (we) model[ws] = wrow;
      #1;
      for (int w = 0; w < WAYS; w++) check(rrow[w] == exp_row[w], "row read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
