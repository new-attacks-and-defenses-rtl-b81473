// tb_dedrp_epoch: checks the epoch counter and key manager with an 8-miss
// epoch: reset keys and phase; second_half from the 4th miss, epoch_end from
// the 8th, saturation at 8; at a swap the target key becomes current, the
// random word becomes the target, the phase flips and the count restarts.
// Three epochs are run.
module tb_dedrp_epoch;
  import dedrp_pkg::*;
  localparam int unsigned E = 8;
  localparam key_t K0 = 64'h1111, K1 = 64'h2222;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic miss, swap, phase, sh, ee;
  key_t rnd_key, kc, kt;
  logic [3:0] count;
  int checks = 0, failures = 0;

  dedrp_epoch #(.EPOCH_MISSES(E), .KEY0(K0), .KEY1(K1)) dut (
    .clk, .rst_n, .miss, .swap, .rnd_key, .key_cur(kc), .key_tgt(kt), .phase,
    .second_half(sh), .epoch_end(ee), .count);

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
    key_t exp_cur, exp_tgt;
    logic exp_phase;
    miss = 0; swap = 0; rnd_key = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check(kc == K0 && kt == K1 && !phase && count == 0, "reset state");
    exp_cur = K0; exp_tgt = K1; exp_phase = 0;
    for (int ep = 0; ep < 3; ep++) begin
      for (int m = 1; m <= 10; m++) begin
        miss <= 1;
        @(posedge clk);
        miss <= 0;
        #1;
        check(int'(count) == ((m < E) ? m : E), "count saturates at epoch length");
        check(sh == (m >= E/2), "second half");
        check(ee == (m >= E), "epoch end");
        check(kc == exp_cur && kt == exp_tgt && phase == exp_phase, "keys stable in epoch");
        @(posedge clk);
      end
      rnd_key <= {$urandom(), $urandom()};
      swap <= 1;
      @(posedge clk);
      swap <= 0;
      #1;
      exp_cur = exp_tgt; exp_tgt = rnd_key; exp_phase = !exp_phase;
      check(kc == exp_cur, "target becomes current");
      check(kt == exp_tgt, "random target key");
      check(phase == exp_phase, "phase flips");
      check(count == 0 && !sh && !ee, "count restarts");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
