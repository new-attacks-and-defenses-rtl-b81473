// tb_dedrp_rng: checks the xorshift64 generator against a reference model
// stepped alongside it for 5000 cycles from the seed, and that it never
// reaches zero and has roughly balanced low bits.
module tb_dedrp_rng;
  localparam logic [63:0] SEED = 64'h0000_0000_DEAD_BEEF;
  logic clk = 0, rst_n = 0;
  logic [63:0] rnd, model;
  int checks = 0, failures = 0, ones = 0;
  always #5 clk = ~clk;

  dedrp_rng #(.SEED(SEED)) dut (.clk, .rst_n, .rnd);

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
    repeat (2) @(posedge clk);
    #1 check(rnd == SEED, "reset loads seed");
    rst_n = 1;
    model = SEED;
    for (int n = 0; n < 5000; n++) begin
      @(posedge clk);
      model = model ^ (model << 13);
      model = model ^ (model >> 7);
      model = model ^ (model << 17);
      #1;
      check(rnd == model, "sequence matches reference");
      check(rnd != 0, "never zero");
      ones += rnd[0];
    end
    check(ones > 2300 && ones < 2700, $sformatf("bit 0 balanced (%0d)", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
