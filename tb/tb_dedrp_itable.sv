// tb_dedrp_itable: checks the iTable memory at 64 entries: every entry is
// written, then random reads on both ports return, one cycle later, what a
// reference array holds, while random writes continue; a read of an entry
// written in the same cycle returns the old value.
module tb_dedrp_itable;
  localparam int unsigned ENTRIES = 64, SET_W = 11, IDX_W = 6;
  logic clk = 0;
  logic [IDX_W-1:0] ra, rb, wi;
  logic [SET_W:0]   ea, eb, we_entry;
  logic             we;
  logic [SET_W:0]   model [ENTRIES];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dedrp_itable #(.ENTRIES(ENTRIES), .SET_W(SET_W)) dut (
    .clk, .ra_idx(ra), .ra_entry(ea), .rb_idx(rb), .rb_entry(eb),
    .we, .w_idx(wi), .w_entry(we_entry));

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
    logic [SET_W:0] exp_a, exp_b;
    we = 0; ra = 0; rb = 0; wi = 0; we_entry = 0;
    for (int i = 0; i < ENTRIES; i++) begin
      we <= 1; wi <= IDX_W'(i); we_entry <= 12'($urandom());
      @(posedge clk);
      model[i] = we_entry;
    end
    for (int n = 0; n < 3000; n++) begin
      ra <= IDX_W'($urandom()); rb <= IDX_W'($urandom());
      we <= ($urandom_range(1) == 1);
      wi <= ($urandom_range(3) == 0) ? ra : IDX_W'($urandom());
      we_entry <= 12'($urandom());
      #1;
      exp_a = model[ra];
      exp_b = model[rb];
      @(posedge clk);
      if (we) model[wi] = we_entry;
      #1;
      check(ea == exp_a, "port a read");
      check(eb == exp_b, "port b read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
