// tb_dedrp_scg_attack: conflict-group eviction experiment on the full-size
// bank (default parameters).
//
// An attacker who wants to evict a target line loads a group of g lines and
// then checks whether the target is gone. With a fixed set mapping, g = ways+1
// lines of the target's set suffice. With the two-level randomized mapping,
// every group line lands in a random set, so a group of unrelated lines
// evicts the target about as often as in a fully associative cache with
// random replacement: 1 - (1 - 1/L)^g for L lines in the cache.
//
// Procedure: warm the cache with 20000 distinct lines, then run 300 trials:
// read a fresh target line, read g = 1000 fresh lines, re-read the target and
// record whether it still hits. L = 16384 gives an expected 5.9% eviction
// rate from the analysis; the cleaner adds evictions in the second half of
// each epoch. The check accepts 2% to 15% and requires that the target,
// when present, is returned with the right data.
module tb_dedrp_scg_attack;
  import dedrp_pkg::*;

  localparam int unsigned G      = 1000;
  localparam int unsigned TRIALS = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid, req_ready, resp_valid;
  llc_req_t    req;
  llc_resp_t   resp;
  logic        mem_req_valid, mem_req_ready, mem_resp_valid, init_done;
  mem_req_t    mem_req;
  line_t       mem_resp_data;
  llc_events_t ev;
  logic [31:0] epoch_misses;
  logic [7:0]  vb_occ;
  int          n_mem_rd, n_mem_wr;

  dedrp_llc dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data,
    .init_done, .events(ev), .epoch_misses, .vb_occupancy(vb_occ));

  mem_model #(.LATENCY(4), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .n_reads(n_mem_rd), .n_writes(n_mem_wr));

  int checks = 0, failures = 0, n_swap = 0;
  always @(posedge clk) if (rst_n && ev.key_swap) n_swap++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  task automatic rd(input line_addr_t a, output llc_resp_t r);
    req_valid <= 1'b1;
    req.we    <= 1'b0;
    req.addr  <= a;
    req.wdata <= '0;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 1'b0;
    do @(posedge clk); while (!resp_valid);
    r = resp;
    #1;
  endtask

  // every call gives a line address never used before
  int unsigned next_line = 0;
  function automatic line_addr_t fresh();
    next_line++;
    return line_addr_t'(64'h0000_00AB_0000_0000 + 64'(next_line) * 64'h1_0003);
  endfunction

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llc_resp_t r;
    line_addr_t t;
    automatic int evicted = 0;
    real rate;
    req_valid = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);
    for (int k = 0; k < 20000; k++) rd(fresh(), r);
    for (int n = 0; n < int'(TRIALS); n++) begin
      t = fresh();
      rd(t, r);
      check(!r.hit && r.rdata == u_mem.init_pattern(t), "fresh target misses, data right");
      for (int k = 0; k < int'(G); k++) rd(fresh(), r);
      rd(t, r);
      check(r.rdata == u_mem.init_pattern(t), "target data");
      if (!r.hit) evicted++;
    end
    rate = 100.0 * evicted / TRIALS;
    $display("group of %0d lines evicted the target in %0d of %0d trials (%0.1f%%); analysis 5.9%%; key swaps %0d",
             G, evicted, TRIALS, rate, n_swap);
    check(rate >= 2.0 && rate <= 15.0, "eviction rate near the random-mapping estimate");
    check(n_swap >= 1, "experiment spans a key swap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
