// tb_dedrp_cleaner: checks the cleaner's scan pointer at 8 entries: it visits
// 0..7 in order, one entry per step, ignores cycles without a step, sets done
// after the last entry and holds there, and restart clears both.
module tb_dedrp_cleaner;
  localparam int unsigned ENTRIES = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic step, restart, done;
  logic [2:0] ptr;
  int checks = 0, failures = 0;

  dedrp_cleaner #(.ENTRIES(ENTRIES)) dut (.clk, .rst_n, .step, .restart, .ptr, .done);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected;
    step = 0; restart = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      expected = 0;
      #1 check(ptr == 0 && !done, "start of scan");
      for (int n = 0; n < 40; n++) begin
        step <= 1'($urandom_range(1));
        @(posedge clk);
        if (step && expected < ENTRIES) expected++;
        #1;
        check(done == (expected == ENTRIES), "done after last entry");
        check(int'(ptr) == expected % ENTRIES, "pointer advances one per step");
      end
      check(done, "scan completes");
      restart <= 1; step <= 1;
      @(posedge clk);
      restart <= 0; step <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
