// tb_dedrp_repl: checks the iTable-aware replacement policy with 8 ways.
//
// Random sets are built from a small pool of iTable indices so that lines of
// one entry often share a set. A reference written here lists the distinct
// entries other than the missing line's, in order of first appearance, and
// picks entry number (rnd mod count). Checks: free way (lowest invalid),
// oversubscription exactly when every way holds the missing line's entry,
// the victim entry, the eviction mask (all and only its ways), the fill way
// (lowest evicted way), and that every candidate is chosen for some rnd.
module tb_dedrp_repl;
  import dedrp_pkg::*;
  localparam int unsigned WAYS = 8, WAY_W = 3;
  way_meta_t        meta [WAYS];
  way_idx_t         miss_idx, victim;
  logic [15:0]      rnd;
  logic             has_free, over;
  logic [WAY_W-1:0] free_way, fill_way;
  logic [WAYS-1:0]  mask;
  int checks = 0, failures = 0;

  dedrp_repl #(.WAYS(WAYS)) dut (.meta, .miss_idx, .rnd, .has_free, .free_way,
    .oversubscribed(over), .evict_mask(mask), .victim_idx(victim), .fill_way);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    way_idx_t cand [$];
    int exp_free, exp_fill;
    way_idx_t exp_vict;
    logic [WAYS-1:0] exp_mask;
    automatic int n_over = 0, n_free = 0, n_evict = 0;
    int sel;
    for (int n = 0; n < 20000; n++) begin
      miss_idx = way_idx_t'($urandom_range(3));
      for (int w = 0; w < WAYS; w++) begin
        meta[w].valid = ($urandom_range(19) != 0);
        meta[w].dirty = 1'($urandom_range(1));
        meta[w].tag   = line_addr_t'({$urandom(), $urandom()});
        meta[w].idx   = (n % 5 == 0) ? miss_idx : way_idx_t'($urandom_range(3));
      end
      rnd = 16'($urandom());
      #1;
      exp_free = -1;
      for (int w = WAYS - 1; w >= 0; w--) if (!meta[w].valid) exp_free = w;
      cand.delete();
      for (int w = 0; w < WAYS; w++)
        if (meta[w].valid && meta[w].idx != miss_idx && !(meta[w].idx inside {cand}))
          cand.push_back(meta[w].idx);
      check(has_free == (exp_free >= 0), "has_free");
      if (exp_free >= 0) begin
        n_free++;
        check(free_way == WAY_W'(exp_free), "free_way");
        check(fill_way == WAY_W'(exp_free), "fill into free way");
        check(mask == '0, "no eviction with a free way");
        check(!over, "no oversubscription with a free way");
      end else if (cand.size() == 0) begin
        n_over++;
        check(over, "oversubscribed");
        check(mask == '0, "nothing evicted when oversubscribed");
      end else begin
        n_evict++;
        check(!over, "not oversubscribed");
        sel = int'(rnd) % cand.size();
        exp_vict = cand[sel];
        exp_mask = '0;
        exp_fill = -1;
        for (int w = WAYS - 1; w >= 0; w--)
          if (meta[w].idx == exp_vict) begin exp_mask[w] = 1'b1; exp_fill = w; end
        check(victim == exp_vict, "victim entry");
        check(mask == exp_mask, "evict all lines of the victim entry");
        check(fill_way == WAY_W'(exp_fill), "fill into lowest evicted way");
        check(victim != miss_idx, "missing line's entry never evicted");
      end
    end
    check(n_over > 0 && n_free > 0 && n_evict > 0, "all three outcomes seen");
    // every candidate entry is reachable: set with entries 1,2,3,1,2,3,1,2; miss 0
    miss_idx = 0;
    for (int w = 0; w < WAYS; w++) begin
      meta[w].valid = 1; meta[w].idx = way_idx_t'(1 + w % 3);
    end
    for (int r = 0; r < 3; r++) begin
      rnd = 16'(r);
      #1 check(victim == way_idx_t'(1 + r), "candidate r chosen for rnd r");
      check($countones(mask) == ((r == 2) ? 2 : 3), "group size");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
