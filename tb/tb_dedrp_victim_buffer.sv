// tb_dedrp_victim_buffer: checks the victim buffer at 4 slots: inserts fill the
// lowest free slot, lookups find lines by address, a write hit updates data
// and sets dirty, idx_match marks the slots of one iTable entry, invalidate
// frees a slot, and when full the insert reuses slots in round-robin order.
// A second phase runs 3000 random inserts, updates and invalidates against a
// reference model of the slots and checks every output after each one: the
// lookup of each of 10 addresses, count, full, the allocation slot, idx_match
// and the slot view.
module tb_dedrp_victim_buffer;
  import dedrp_pkg::*;
  localparam int unsigned ENTRIES = 4, SLOT_W = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  line_addr_t lk_addr, ins_addr, vaddr;
  logic lk_hit, ins_en, full, upd_en, inv_en, vvalid, vdirty, ins_dirty;
  logic [SLOT_W-1:0] lk_slot, alloc, upd_slot, inv_slot, view;
  line_t lk_data, ins_data, upd_data, vdata;
  way_idx_t ins_idx, match_idx;
  logic [ENTRIES-1:0] match;
  logic [SLOT_W:0] count;
  int checks = 0, failures = 0;

  dedrp_victim_buffer #(.ENTRIES(ENTRIES)) dut (
    .clk, .rst_n, .lk_addr, .lk_hit, .lk_slot, .lk_data,
    .ins_en, .ins_addr, .ins_idx, .ins_data, .ins_dirty, .alloc_slot(alloc), .full,
    .upd_en, .upd_slot, .upd_data, .inv_en, .inv_slot, .match_idx, .idx_match(match),
    .view_slot(view), .view_valid(vvalid), .view_dirty(vdirty), .view_addr(vaddr),
    .view_data(vdata), .count);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic insert(input line_addr_t a, input way_idx_t i, input line_t d, input logic dy);
    ins_en <= 1; ins_addr <= a; ins_idx <= i; ins_data <= d; ins_dirty <= dy;
    @(posedge clk);
    ins_en <= 0;
    #1;
  endtask

  // reference model
  logic       m_valid [ENTRIES];
  logic       m_dirty [ENTRIES];
  line_addr_t m_addr  [ENTRIES];
  way_idx_t   m_idx   [ENTRIES];
  line_t      m_data  [ENTRIES];
  int         m_rr;

  function automatic int m_alloc();
    for (int s = 0; s < int'(ENTRIES); s++) if (!m_valid[s]) return s;
    return m_rr;
  endfunction
  function automatic int m_count();
    int n = 0;
    for (int s = 0; s < int'(ENTRIES); s++) n += int'(m_valid[s]);
    return n;
  endfunction
  function automatic int m_find(input line_addr_t a);
    for (int s = 0; s < int'(ENTRIES); s++) if (m_valid[s] && m_addr[s] == a) return s;
    return -1;
  endfunction

  task automatic compare_all();
    int f;
    logic [ENTRIES-1:0] em;
    check(int'(count) == m_count() && full == (m_count() == int'(ENTRIES)), "model count/full");
    check(int'(alloc) == m_alloc(), "model alloc slot");
    for (int k = 0; k < 10; k++) begin
      lk_addr = 58'h300 + 58'(k);
      #1;
      f = m_find(lk_addr);
      if (f < 0) check(!lk_hit, "model lookup miss");
      else check(lk_hit && int'(lk_slot) == f && lk_data == m_data[f], "model lookup hit");
    end
    match_idx = way_idx_t'($urandom_range(3));
    for (int s = 0; s < int'(ENTRIES); s++) em[s] = m_valid[s] && m_idx[s] == match_idx;
    view = SLOT_W'($urandom_range(ENTRIES - 1));
    #1;
    check(match == em, "model idx_match");
    check(vvalid == m_valid[view] &&
          (!m_valid[view] || (vdirty == m_dirty[view] && vaddr == m_addr[view] && vdata == m_data[view])),
          "model slot view");
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ins_en = 0; upd_en = 0; inv_en = 0; lk_addr = '0; view = 0; match_idx = 0;
    ins_addr = '0; ins_idx = '0; ins_data = '0; ins_dirty = 0; upd_slot = 0; upd_data = '0; inv_slot = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check(count == 0 && !full && alloc == 0, "empty after reset");
    for (int s = 0; s < 4; s++) begin
      check(alloc == SLOT_W'(s), "lowest free slot");
      insert(58'h100 + 58'(s), way_idx_t'(s % 2), {16{32'(s + 7)}}, s[0]);
    end
    check(full && count == 4, "full after four inserts");
    for (int s = 0; s < 4; s++) begin
      lk_addr = 58'h100 + 58'(s);
      #1 check(lk_hit && lk_slot == SLOT_W'(s) && lk_data == {16{32'(s + 7)}}, "lookup hit");
      view = SLOT_W'(s);
      #1 check(vvalid && vdirty == s[0] && vaddr == lk_addr, "slot view");
    end
    lk_addr = 58'h999;
    #1 check(!lk_hit, "lookup miss");
    match_idx = 1;
    #1 check(match == 4'b1010, "idx_match entry 1");
    // write hit on slot 0
    upd_en <= 1; upd_slot <= 0; upd_data <= {16{32'hCAFE}};
    @(posedge clk); upd_en <= 0; #1;
    lk_addr = 58'h100; view = 0;
    #1 check(lk_data == {16{32'hCAFE}} && vdirty, "update writes data, sets dirty");
    // full: round robin starting at slot 0, then 1
    check(alloc == 0, "round robin slot 0");
    insert(58'h200, 3, '1, 0);
    check(alloc == 1, "round robin slot 1");
    lk_addr = 58'h200;
    #1 check(lk_hit && lk_slot == 0, "replaced line found");
    lk_addr = 58'h100;
    #1 check(!lk_hit, "old line gone");
    // invalidate slot 2
    inv_en <= 1; inv_slot <= 2;
    @(posedge clk); inv_en <= 0; #1;
    check(!full && count == 3 && alloc == 2, "invalidate frees slot");
    lk_addr = 58'h102;
    #1 check(!lk_hit, "invalidated line gone");

    // ---- random phase against the reference model
    rst_n = 0;
    #1 rst_n = 1;
    for (int s = 0; s < int'(ENTRIES); s++) begin m_valid[s] = 0; m_dirty[s] = 0; end
    m_rr = 0;
    for (int n = 0; n < 3000; n++) begin
      int op, sl, cand;
      line_addr_t a;
      op = $urandom_range(2);
      if (op == 0) begin
        // insert a line not already buffered
        do begin
          cand = $urandom_range(9);
          a    = 58'h300 + 58'(cand);
        end while (m_find(a) >= 0);
        sl = m_alloc();
        ins_en <= 1; ins_addr <= a; ins_idx <= way_idx_t'($urandom_range(3));
        ins_data <= {16{$urandom()}}; ins_dirty <= 1'($urandom_range(1));
        @(posedge clk); ins_en <= 0; #1;
        if (m_count() == int'(ENTRIES)) m_rr = (m_rr + 1) % int'(ENTRIES);
        m_valid[sl] = 1; m_dirty[sl] = ins_dirty; m_addr[sl] = a;
        m_idx[sl] = ins_idx; m_data[sl] = ins_data;
      end else if (op == 1) begin
        sl = $urandom_range(ENTRIES - 1);
        upd_en <= 1; upd_slot <= SLOT_W'(sl); upd_data <= {16{$urandom()}};
        @(posedge clk); upd_en <= 0; #1;
        m_dirty[sl] = 1; m_data[sl] = upd_data;
      end else begin
        sl = $urandom_range(ENTRIES - 1);
        inv_en <= 1; inv_slot <= SLOT_W'(sl);
        @(posedge clk); inv_en <= 0; #1;
        m_valid[sl] = 0;
      end
      compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
