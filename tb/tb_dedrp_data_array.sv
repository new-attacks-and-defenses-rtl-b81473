// tb_dedrp_data_array: checks the line store at 16 sets x 4 ways: random
// writes and reads of {set, way}, read data one cycle after the address equal
// to a reference copy; a read in the cycle of a write returns the old line.
module tb_dedrp_data_array;
  import dedrp_pkg::*;
  localparam int unsigned SETS = 16, WAYS = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [3:0] set;
  logic [1:0] way;
  logic we;
  line_t wdata, rdata, expd;
  line_t model [SETS*WAYS];
  int checks = 0, failures = 0;

  dedrp_data_array #(.SETS(SETS), .WAYS(WAYS)) dut (.clk, .set, .way, .we, .wdata, .rdata);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; set = 0; way = 0; wdata = '0;
    for (int i = 0; i < SETS*WAYS; i++) begin
      we <= 1; {set, way} <= 6'(i); wdata <= {16{$urandom()}};
      @(posedge clk);
      model[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      we <= 1'($urandom_range(1)); {set, way} <= 6'($urandom()); wdata <= {16{$urandom()}};
      #1;
      expd = model[{set, way}];
      @(posedge clk);
      if (we) model[{set, way}] = wdata;
      #1 check(rdata == expd, "line read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
