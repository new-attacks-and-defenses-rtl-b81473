// tb_dedrp_oversub_attack: iTable oversubscription attack on the full-size
// bank (default parameters).
//
// An attacker who could find many line addresses that encrypt to the same
// iTable entry as a target would own a group of lines that always share the
// target's set. This testbench plays the strongest such attacker: it knows
// the reset key and builds the addresses directly, by decrypting ciphertexts
// whose low 15 bits are the target's entry (the encryption is a Feistel
// network, so the testbench carries its own copy of it and of its inverse).
//
// Phase 1, right after reset (empty cache, nothing transitioned): read the
// target T, then 40 lines A1..A40 of T's entry. T and A1..A7 fill the eight
// ways of T's set. A8..A40 find the set full of their own entry, which the
// replacement policy will not evict, so they are oversubscribed and go to the
// victim buffer. A40 finds the buffer's 32 slots full and replaces the slot
// at the round-robin pointer (A8). Checks: the counts of free fills,
// oversubscriptions and full-buffer replacements are exactly 8, 33 and 1; T
// and A1..A7 still hit in the cache; A9..A40 hit in the victim buffer; all
// data is right. The attack group never evicts the target.
//
// Phase 2: random traffic to fresh lines until the epoch ends and the keys
// swap. By then every entry has been refreshed, so the buffered attack
// lines have been drained (written back and dropped) and the buffer is empty
// unless the random traffic itself oversubscribed an entry.
//
// Phase 3: the attacker repeats phase 1 with a new target and 40 lines built
// for the old key. Under the new key they scatter over the table: no
// oversubscription occurs and the new target still hits.
module tb_dedrp_oversub_attack;
  import dedrp_pkg::*;

  localparam int unsigned IDX_W  = 15;       // default iTable: 2^15 entries
  localparam key_t        KEY0   = 64'h0123456789ABCDEF;  // reset current key
  localparam int unsigned N_ATK  = 40;
  localparam int unsigned VB     = 32;
  localparam int unsigned WAYS   = 8;

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
  int n_swap = 0, n_oversub = 0, n_vbfull = 0, n_free = 0, n_drain = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev.key_swap)      n_swap++;
    if (ev.oversub)       n_oversub++;
    if (ev.vb_full_evict) n_vbfull++;
    if (ev.free_fill)     n_free++;
    if (ev.vb_drain)      n_drain++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // reference copy of the address encryption and its inverse
  function automatic logic [28:0] rotl(input logic [28:0] x, input int n);
    return (x << n) | (x >> (29 - n));
  endfunction
  function automatic logic [28:0] f(input logic [28:0] r, input logic [15:0] rk);
    logic [28:0] t;
    t = r ^ {rk[12:0], rk};
    t = t + rotl(t, 7);
    t = t ^ rotl(t, 13);
    return t;
  endfunction
  function automatic line_addr_t enc(input line_addr_t x, input key_t key);
    logic [28:0] l, r, t;
    {l, r} = x;
    for (int i = 0; i < 4; i++) begin
      t = l ^ f(r, key[16*i +: 16]);
      l = r;
      r = t;
    end
    return {l, r};
  endfunction
  function automatic line_addr_t dec(input line_addr_t y, input key_t key);
    logic [28:0] l, r, t;
    {l, r} = y;
    for (int i = 3; i >= 0; i--) begin
      t = r ^ f(l, key[16*i +: 16]);
      r = l;
      l = t;
    end
    return {l, r};
  endfunction

  // the k-th address whose ciphertext under `key` has low bits `e`
  function automatic line_addr_t collide(input logic [IDX_W-1:0] e, input int k,
                                         input key_t key);
    line_addr_t c;
    c = line_addr_t'({43'(k) * 43'h5_1F3B_0C71, e});
    return dec(c, key);
  endfunction

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

  int unsigned next_line = 0;
  function automatic line_addr_t fresh();
    next_line++;
    return line_addr_t'(64'h0000_00CD_0000_0000 + 64'(next_line) * 64'h1_0007);
  endfunction

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llc_resp_t  r;
    line_addr_t t, a[N_ATK];
    logic [IDX_W-1:0] e;
    int ov0;
    req_valid = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);

    // ---- phase 1: oversubscribe the target's entry under the known key
    e = IDX_W'(16'h2A5C);
    t = collide(e, 1000, KEY0);
    for (int k = 0; k < int'(N_ATK); k++) a[k] = collide(e, k + 1, KEY0);
    check(enc(t, KEY0)[IDX_W-1:0] == e, "target encrypts to chosen entry");
    for (int k = 0; k < int'(N_ATK); k++)
      check(enc(a[k], KEY0)[IDX_W-1:0] == e && a[k] != t, "attack line encrypts to target entry");
    rd(t, r);
    check(!r.hit && r.rdata == u_mem.init_pattern(t), "target miss, data");
    for (int k = 0; k < int'(N_ATK); k++) begin
      rd(a[k], r);
      check(!r.hit && r.rdata == u_mem.init_pattern(a[k]), "attack line miss, data");
    end
    check(n_free == int'(WAYS), "T and A1..A7 fill free ways");
    check(n_oversub == int'(N_ATK - (WAYS - 1)), "A8..A40 oversubscribed");
    check(n_vbfull == 1, "one full-buffer replacement");
    check(int'(vb_occ) == int'(VB), "victim buffer full");
    for (int k = int'(WAYS); k < int'(N_ATK); k++) begin
      rd(a[k], r);
      check(r.hit && r.vb_hit && r.rdata == u_mem.init_pattern(a[k]), "buffered attack line hits in buffer");
    end
    for (int k = 0; k < int'(WAYS) - 1; k++) begin
      rd(a[k], r);
      check(r.hit && !r.vb_hit && r.rdata == u_mem.init_pattern(a[k]), "attack line in set hits");
    end
    rd(t, r);
    check(r.hit && !r.vb_hit && r.rdata == u_mem.init_pattern(t), "target survives the attack group");
    $display("phase 1: %0d lines of one entry, %0d oversubscribed, buffer %0d/%0d, target still cached",
             N_ATK, n_oversub, vb_occ, VB);

    // ---- phase 2: ordinary traffic until the keys swap
    ov0 = n_oversub;
    while (n_swap == 0) rd(fresh(), r);
    check(n_drain >= int'(VB) - 1, "buffered attack lines drained when their entry was refreshed");
    if (n_oversub == ov0) check(vb_occ == 0, "buffer empty at the key swap");
    $display("phase 2: key swap after %0d lines, %0d buffered lines drained, buffer %0d",
             next_line, n_drain, vb_occ);

    // ---- phase 3: the same attack with the retired key
    ov0 = n_oversub;
    e = IDX_W'(16'h1337);
    t = collide(e, 2000, KEY0);
    rd(t, r);
    for (int k = 0; k < int'(N_ATK); k++) rd(collide(e, k + 3000, KEY0), r);
    rd(t, r);
    check(r.hit && r.rdata == u_mem.init_pattern(t), "new target survives");
    check(n_oversub == ov0, "no oversubscription with the retired key");
    $display("phase 3: %0d lines built for the retired key caused %0d oversubscriptions",
             N_ATK, n_oversub - ov0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
