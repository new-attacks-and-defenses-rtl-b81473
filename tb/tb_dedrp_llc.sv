// tb_dedrp_llc: end-to-end test of the DE+DRP cache bank at reduced size.
//
// 16 sets x 8 ways, a 32-entry iTable, an 8-entry victim buffer and a 256-miss epoch, so that every
// mechanism happens many times within a short run. A random stream of whole-
// line reads and writes over a pool of addresses (larger than the cache, and
// large against the iTable so entries get oversubscribed) is sent to the bank,
// which talks to a behavioural memory with random stalls.
//
// Checks: every read returns the last value written to that line, or the
// memory's initial pattern (a reference map kept here, independent of the
// bank); a read that immediately repeats an answered access hits, unless the
// cleaner evicted something in between; read hits answer 4 cycles after
// acceptance and victim-buffer hits 1; after the run, all data written back
// to memory plus what is still cached reads back right. Every mechanism
// (hit, victim-buffer hit, miss, target-key select, free fill, group eviction,
// refresh, oversubscription, full victim buffer, buffer drain, write-back,
// cleaner step and eviction, key swap) must occur at least once.
module tb_dedrp_llc;
  import dedrp_pkg::*;

  localparam int unsigned SETS   = 16;
  localparam int unsigned WAYS   = 8;
  localparam int unsigned ITE    = 32;
  localparam int unsigned EPOCH  = 256;
  localparam int unsigned VB     = 8;
  localparam int unsigned POOL   = 600;
  localparam int unsigned N_OPS  = 30000;

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

  dedrp_llc #(.SETS(SETS), .WAYS(WAYS), .ITABLE_ENTRIES(ITE), .EPOCH_MISSES(EPOCH),
              .VB_ENTRIES(VB)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data,
    .init_done, .events(ev), .epoch_misses, .vb_occupancy(vb_occ));

  mem_model #(.LATENCY(6), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .n_reads(n_mem_rd), .n_writes(n_mem_wr));

  int checks = 0, failures = 0;
  line_t ref_mem [line_addr_t];

  function automatic line_t expect_line(input line_addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : u_mem.init_pattern(a);
  endfunction

  function automatic line_addr_t pool_addr(input int unsigned k);
    return line_addr_t'(64'h0000_1234_0000_0000 + 64'(k) * 64'h9_1F3);
  endfunction

  // event counters
  localparam int NEV = 14;
  int ev_cnt [NEV];
  string ev_name [NEV] = '{"hit", "vb_hit", "miss", "used_target", "free_fill",
                          "multi_evict", "refresh", "oversub", "vb_full_evict",
                          "vb_drain", "writeback", "clean_step", "clean_evict",
                          "key_swap"};
  always @(posedge clk) if (rst_n) begin
    if (ev.hit)           ev_cnt[0]++;
    if (ev.vb_hit)        ev_cnt[1]++;
    if (ev.miss)          ev_cnt[2]++;
    if (ev.used_target)   ev_cnt[3]++;
    if (ev.free_fill)     ev_cnt[4]++;
    if (ev.multi_evict)   ev_cnt[5]++;
    if (ev.refresh)       ev_cnt[6]++;
    if (ev.oversub)       ev_cnt[7]++;
    if (ev.vb_full_evict) ev_cnt[8]++;
    if (ev.vb_drain)      ev_cnt[9]++;
    if (ev.writeback)     ev_cnt[10]++;
    if (ev.clean_step)    ev_cnt[11]++;
    if (ev.clean_evict)   ev_cnt[12]++;
    if (ev.key_swap)      ev_cnt[13]++;
  end

  int clean_evicts_seen;
  always @(posedge clk) if (ev.clean_evict) clean_evicts_seen++;

  // one request; returns the response and the cycles from acceptance
  task automatic do_req(input logic we, input line_addr_t a, input line_t d,
                        output llc_resp_t r, output int lat);
    req_valid <= 1'b1;
    req.we    <= we;
    req.addr  <= a;
    req.wdata <= d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 1'b0;
    lat = 0;
    do begin
      @(posedge clk);
      lat++;
    end while (!resp_valid);
    r = resp;
    #1;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llc_resp_t r;
    int lat, ce;
    line_addr_t a;
    line_t d;
    logic we;
    req_valid = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);

    for (int n = 0; n < N_OPS; n++) begin
      // hot subset early in each thousand, whole pool otherwise
      if ($urandom_range(99) < 50) a = pool_addr($urandom_range(40));
      else                         a = pool_addr($urandom_range(POOL - 1));
      we = ($urandom_range(99) < 30);
      d  = {16{$urandom()}};
      do_req(we, a, d, r, lat);
      if (we) ref_mem[a] = d;
      else check(r.rdata == expect_line(a), $sformatf("read data addr %h", a));
      if (!we && r.hit) check(lat == (r.vb_hit ? 1 : 4), $sformatf("hit latency %0d", lat));
      // immediate re-read must hit unless the cleaner evicted in between
      if ($urandom_range(99) < 20) begin
        ce = clean_evicts_seen;
        do_req(1'b0, a, '0, r, lat);
        check(r.rdata == expect_line(a), "re-read data");
        if (clean_evicts_seen == ce) check(r.hit, "re-read hits");
      end
    end

    // final sweep: every line reads back right
    for (int k = 0; k < POOL; k++) begin
      do_req(1'b0, pool_addr(k), '0, r, lat);
      check(r.rdata == expect_line(pool_addr(k)), "final sweep");
    end

    check(int'(vb_occ) <= int'(VB), "victim buffer occupancy bound");
    for (int e = 0; e < NEV; e++) begin
      $display("event %-14s %0d", ev_name[e], ev_cnt[e]);
      check(ev_cnt[e] > 0, {"mechanism never happened: ", ev_name[e]});
    end
    $display("memory reads %0d writes %0d", n_mem_rd, n_mem_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
