// tb_dedrp_llc_full: the cache bank at its full default size (2048 sets x 8
// ways, 2^15-entry iTable, 2^16-miss epoch, 32-entry victim buffer) taken
// through two complete epochs.
//
// After the init sequence, random reads and writes over 48K distinct lines
// (three times the bank's 16K lines, so most accesses miss) are issued until
// the second key swap, then 2000 more. The first epoch starts from a cold
// cache and the second from a warm one; the cleaner's work in each is
// printed (entries it refreshed, how many of them still held lines, and the
// lines it evicted). Every read is checked against a
// reference map of the last written data (or the memory's initial pattern).
// The run must see at least one key swap, cleaner evictions of
// untransitioned entries, group evictions, refreshes and hits; the init
// sequence must take max(entries, sets) cycles.
module tb_dedrp_llc_full;
  import dedrp_pkg::*;

  localparam int unsigned POOL = 49152;

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

  int checks = 0, failures = 0;
  line_t ref_mem [line_addr_t];
  int n_hit = 0, n_miss = 0, n_swap = 0, n_clean_ev = 0, n_multi = 0, n_refresh = 0;
  int n_over = 0, n_vbhit = 0, n_tgt = 0, max_vb = 0;
  // lines the cleaner had to evict (an untransitioned entry may map none)
  int n_clean_lines = 0, n_clean_busy = 0, ce0 = 0, cb0 = 0, cl0 = 0;
  logic [7:0] prev_mask;

  always @(posedge clk) if (rst_n) begin
    n_hit      += int'(ev.hit);
    n_miss     += int'(ev.miss);
    n_swap     += int'(ev.key_swap);
    n_clean_ev += int'(ev.clean_evict);
    n_multi    += int'(ev.multi_evict);
    n_refresh  += int'(ev.refresh);
    n_over     += int'(ev.oversub);
    n_vbhit    += int'(ev.vb_hit);
    n_tgt      += int'(ev.used_target);
    if (int'(vb_occ) > max_vb) max_vb = int'(vb_occ);
    if (dut.r_cleaning && prev_mask == '0 && dut.r_evict_mask != '0) begin
      n_clean_lines += $countones(dut.r_evict_mask);
      n_clean_busy++;
    end
    prev_mask <= dut.r_evict_mask;
    if (ev.key_swap) begin
      $display("epoch %0d: cleaner refreshed %0d entries, %0d held lines, %0d lines evicted",
               n_swap, n_clean_ev - ce0, n_clean_busy - cb0, n_clean_lines - cl0);
      ce0 = n_clean_ev;
      cb0 = n_clean_busy;
      cl0 = n_clean_lines;
    end
  end

  function automatic line_addr_t pool_addr(input int unsigned k);
    return line_addr_t'(64'h0000_0007_0000_0000 + 64'(k) * 64'h3_0001);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  task automatic do_req(input logic we, input line_addr_t a, input line_t d,
                        output llc_resp_t r);
    req_valid <= 1'b1;
    req.we    <= we;
    req.addr  <= a;
    req.wdata <= d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 1'b0;
    do @(posedge clk); while (!resp_valid);
    r = resp;
    #1;
  endtask

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llc_resp_t r;
    line_addr_t a;
    line_t d, e;
    logic we;
    automatic int init_cycles = 0, extra = 0;
    req_valid = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!init_done) begin
      @(posedge clk);
      init_cycles++;
    end
    check(init_cycles == 32768, $sformatf("init takes 32768 cycles (%0d)", init_cycles));
    while (extra < 2000) begin
      a  = pool_addr($urandom_range(POOL - 1));
      we = ($urandom_range(99) < 25);
      d  = {16{$urandom()}};
      do_req(we, a, d, r);
      if (we) ref_mem[a] = d;
      else begin
        e = ref_mem.exists(a) ? ref_mem[a] : u_mem.init_pattern(a);
        check(r.rdata == e, "read data");
      end
      if (n_swap > 1) extra++;
    end
    $display("hits %0d misses %0d target-key selects %0d group evictions %0d refreshes %0d",
             n_hit, n_miss, n_tgt, n_multi, n_refresh);
    $display("cleaner evictions %0d oversubscribed %0d victim-buffer hits %0d max buffer %0d swaps %0d",
             n_clean_ev, n_over, n_vbhit, max_vb, n_swap);
    $display("cleaner: %0d entries refreshed, %0d of them held lines, %0d lines evicted",
             n_clean_ev, n_clean_busy, n_clean_lines);
    check(n_swap >= 2, "two key swaps happened");
    check(n_clean_ev > 0, "cleaner transitioned entries");
    check(n_multi > 0 && n_refresh > 0 && n_hit > 0, "evictions, refreshes and hits");
    check(max_vb <= 32, "victim buffer bound");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
