// dedrp_llc: one bank of a last-level cache with two-level randomization
// (dynamic encryption + dynamic random placement, "DE+DRP").
//
// Idea. A line is not placed by its address bits. Its line address is first
// encrypted (dedrp_cipher); the ciphertext selects an entry of the
// indirection table (dedrp_itable), and that entry holds a random set number.
// The line lives in that set. Two things keep the mapping moving:
//   * DRP: whenever all lines of an iTable entry have been evicted, the entry
//     gets a fresh random set ("refresh").
//   * DE: there is a current and a target key. Refreshing an entry also marks
//     it transitioned; a transitioned entry may only be reached through the
//     target key. Over an epoch of EPOCH_MISSES misses every entry
//     transitions (the cleaner sweeps up the rest in the second half), then
//     the keys swap and a new random target key is drawn.
//
// Access sequence (one request at a time, not pipelined):
//   IDLE      accept a request (valid/ready).
//   LOOKUP    encrypt the address with both keys; check the victim buffer.
//             A buffer hit is answered here. Otherwise read iTable entries i
//             (current key) and j (target key).
//   ITAB      precedence select: S_i unless i has transitioned, then S_j.
//             Read the tag row of that set.
//   TAG       compare all ways. Read hit: read the data (DATA, respond).
//             Write hit: write data, set dirty, respond.
//   MEM_RD/   read miss: fetch the line from memory. Write misses skip the
//   MEM_WAIT  fetch (requests are whole lines).
//   REPL      dedrp_repl decides: fill a free way; or evict every line of one
//             random other iTable entry (EVICT, EVICT_RD, WB write back dirty
//             lines; VB_DRAIN writes back and drops that entry's victim
//             buffer lines), then FILL the line and refresh the evicted entry
//             with a random set; or, if the set is full of lines of the
//             missing line's own entry (oversubscribed), put the line in the
//             victim buffer (VB_INS, writing back the oldest slot if full).
//   Cleaner   after each access in the second half of the epoch, one iTable
//             entry (at the cleaner's pointer) is read (CLN_RD/CLN_IT); if it
//             has not transitioned, its lines are evicted (CLN_TAG, EVICT...)
//             and it is refreshed (CLN_REFRESH).
//   Key swap  in IDLE, once the epoch is over and the cleaner is done.
// After reset, INIT writes every iTable entry with a random set and clears
// every tag row (max(ITABLE_ENTRIES, SETS) cycles); init_done then rises.
//
// Latency, counted in clock edges after the one that accepts the request:
// resp_valid is high after 1 edge for a victim-buffer hit, 4 for a cache read
// hit, 3 for a write hit; a miss adds the memory latency and a cycle per
// evicted line (plus memory handshakes for dirty ones).
//
// Interface: req_valid/req_ready/req (llc_req_t); resp_valid pulses for one
// cycle with resp (llc_resp_t). Memory: mem_req_valid/mem_req_ready/mem_req
// (a read or a write-back of one line); a read is answered later by a
// one-cycle mem_resp_valid with mem_resp_data. events pulses one bit per
// mechanism, for performance counters. epoch_misses and vb_occupancy are
// zero-extended to fixed widths; at the default sizes their top bits (15 of
// epoch_misses, 2 of vb_occupancy) are always zero. Some sub-block outputs
// are not needed here and are left unused: the full ciphertext (only the
// table index is used), the victim buffer view's valid bit, and the top bit
// of the 16-bit stored index when the table has 2^15 entries.
//
// The lookup order (victim buffer, key select, tag check), the grouped
// eviction, the refresh on eviction, the victim buffer, the cleaner and the
// sizes follow the paper. The multi-cycle sequencing, the interfaces, the
// write-back handling, the victim buffer draining and the phase-bit encoding
// of "transitioned" are this design's own.
module dedrp_llc
  import dedrp_pkg::*;
#(
  parameter int unsigned SETS           = 2048,
  parameter int unsigned WAYS           = 8,
  parameter int unsigned ITABLE_ENTRIES = 32768,
  parameter int unsigned EPOCH_MISSES   = 65536,
  parameter int unsigned VB_ENTRIES     = 32,
  parameter logic [63:0] RNG_SEED       = 64'h9E3779B97F4A7C15,
  parameter key_t        KEY0           = 64'h0123456789ABCDEF,
  parameter key_t        KEY1           = 64'hFEDCBA9876543210
) (
  input  logic        clk,
  input  logic        rst_n,
  // requests from the core side
  input  logic        req_valid,
  output logic        req_ready,
  input  llc_req_t    req,
  output logic        resp_valid,
  output llc_resp_t   resp,
  // main memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_resp_valid,
  input  line_t       mem_resp_data,
  // status
  output logic        init_done,
  output llc_events_t events,
  output logic [31:0] epoch_misses,   // misses counted in the current epoch
  output logic [7:0]  vb_occupancy    // lines held in the victim buffer
);

  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned IDX_W  = $clog2(ITABLE_ENTRIES);
  localparam int unsigned SLOT_W = $clog2(VB_ENTRIES);
  localparam int unsigned INIT_N = (ITABLE_ENTRIES > SETS) ? ITABLE_ENTRIES : SETS;
  localparam int unsigned INIT_W = $clog2(INIT_N);

  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_ITAB, S_TAG, S_DATA, S_MEM_RD, S_MEM_WAIT,
    S_REPL, S_EVICT, S_EVICT_RD, S_WB, S_VB_DRAIN, S_FILL, S_VB_INS,
    S_CLN_RD, S_CLN_IT, S_CLN_TAG, S_CLN_REFRESH
  } state_t;

  state_t state, state_n;

  // ---------------------------------------------------------------- registers
  llc_req_t           r_req;
  logic [IDX_W-1:0]   r_idx_cur, r_idx_tgt, r_sel_idx, r_victim_idx;
  logic [SET_W-1:0]   r_sel_set;
  way_meta_t          r_row [WAYS];
  line_t              r_fill_data, r_wb_data;
  logic [WAYS-1:0]    r_evict_mask;
  logic [WAY_W-1:0]   r_fill_way, r_wb_way;
  logic               r_evicting;   // this miss evicted an entry's lines
  logic               r_cleaning;   // the eviction belongs to the cleaner
  logic [VB_ENTRIES-1:0] r_vb_mask;
  logic               cln_pending;
  logic [INIT_W-1:0]  init_cnt;

  // ---------------------------------------------------------------- submodules
  logic [63:0] rnd;
  dedrp_rng #(.SEED(RNG_SEED)) u_rng (.clk, .rst_n, .rnd);

  key_t key_cur, key_tgt;
  logic phase, second_half, epoch_end, ep_miss, ep_swap;
  logic [$clog2(EPOCH_MISSES+1)-1:0] ep_count;
  dedrp_epoch #(.EPOCH_MISSES(EPOCH_MISSES), .KEY0(KEY0), .KEY1(KEY1)) u_epoch (
    .clk, .rst_n, .miss(ep_miss), .swap(ep_swap), .rnd_key(rnd),
    .key_cur, .key_tgt, .phase, .second_half, .epoch_end, .count(ep_count));

  logic [IDX_W-1:0] cln_ptr;
  logic cln_done, cln_step;
  dedrp_cleaner #(.ENTRIES(ITABLE_ENTRIES)) u_cleaner (
    .clk, .rst_n, .step(cln_step), .restart(ep_swap), .ptr(cln_ptr), .done(cln_done));

  logic [IDX_W-1:0] idx_cur, idx_tgt;
  dedrp_cipher #(.IDX_W(IDX_W)) u_de_cur (
    .line_addr(r_req.addr), .key(key_cur), .cipher(), .idx(idx_cur));
  dedrp_cipher #(.IDX_W(IDX_W)) u_de_tgt (
    .line_addr(r_req.addr), .key(key_tgt), .cipher(), .idx(idx_tgt));

  logic [IDX_W-1:0] it_ra, it_wi;
  logic [SET_W:0]   it_ea, it_eb, it_we_entry;
  logic             it_we;
  dedrp_itable #(.ENTRIES(ITABLE_ENTRIES), .SET_W(SET_W)) u_itable (
    .clk, .ra_idx(it_ra), .ra_entry(it_ea), .rb_idx(idx_tgt), .rb_entry(it_eb),
    .we(it_we), .w_idx(it_wi), .w_entry(it_we_entry));

  logic [IDX_W-1:0] ks_idx;
  logic [SET_W-1:0] ks_set;
  logic             ks_tgt;
  dedrp_key_select #(.IDX_W(IDX_W), .SET_W(SET_W)) u_key_select (
    .idx_cur(r_idx_cur), .ent_cur(it_ea), .idx_tgt(r_idx_tgt), .ent_tgt(it_eb),
    .phase, .sel_idx(ks_idx), .sel_set(ks_set), .used_target(ks_tgt));

  logic [SET_W-1:0] tg_rset, tg_wset;
  logic             tg_we;
  way_meta_t        tg_rrow [WAYS];
  way_meta_t        tg_wrow [WAYS];
  dedrp_tag_array #(.SETS(SETS), .WAYS(WAYS)) u_tags (
    .clk, .rd_set(tg_rset), .rd_row(tg_rrow), .we(tg_we), .wr_set(tg_wset), .wr_row(tg_wrow));

  logic [SET_W-1:0] da_set;
  logic [WAY_W-1:0] da_way;
  logic             da_we;
  line_t            da_wdata, da_rdata;
  dedrp_data_array #(.SETS(SETS), .WAYS(WAYS)) u_data (
    .clk, .set(da_set), .way(da_way), .we(da_we), .wdata(da_wdata), .rdata(da_rdata));

  logic             rp_free, rp_over;
  logic [WAY_W-1:0] rp_free_way, rp_fill_way;
  logic [WAYS-1:0]  rp_mask;
  way_idx_t         rp_victim;
  dedrp_repl #(.WAYS(WAYS)) u_repl (
    .meta(r_row), .miss_idx(way_idx_t'(r_sel_idx)), .rnd(rnd[31:16]),
    .has_free(rp_free), .free_way(rp_free_way), .oversubscribed(rp_over),
    .evict_mask(rp_mask), .victim_idx(rp_victim), .fill_way(rp_fill_way));

  logic              vb_hit, vb_full, vb_ins, vb_upd, vb_inv, vb_vvalid, vb_vdirty;
  logic [SLOT_W-1:0] vb_slot, vb_alloc, vb_inv_slot, vb_view;
  logic [SLOT_W:0]   vb_count;
  line_t             vb_data, vb_vdata;
  line_addr_t        vb_vaddr;
  logic [VB_ENTRIES-1:0] vb_match;
  dedrp_victim_buffer #(.ENTRIES(VB_ENTRIES)) u_vb (
    .clk, .rst_n,
    .lk_addr(r_req.addr), .lk_hit(vb_hit), .lk_slot(vb_slot), .lk_data(vb_data),
    .ins_en(vb_ins), .ins_addr(r_req.addr), .ins_idx(way_idx_t'(r_sel_idx)),
    .ins_data(r_fill_data), .ins_dirty(r_req.we), .alloc_slot(vb_alloc), .full(vb_full),
    .upd_en(vb_upd), .upd_slot(vb_slot), .upd_data(r_req.wdata),
    .inv_en(vb_inv), .inv_slot(vb_inv_slot),
    .match_idx(way_idx_t'(r_victim_idx)), .idx_match(vb_match),
    .view_slot(vb_view), .view_valid(vb_vvalid), .view_dirty(vb_vdirty),
    .view_addr(vb_vaddr), .view_data(vb_vdata), .count(vb_count));

  // ---------------------------------------------------------------- helpers
  function automatic logic [WAY_W-1:0] lowest_way(input logic [WAYS-1:0] m);
    lowest_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) if (m[w]) lowest_way = WAY_W'(w);
  endfunction

  function automatic logic [SLOT_W-1:0] lowest_slot(input logic [VB_ENTRIES-1:0] m);
    lowest_slot = '0;
    for (int s = VB_ENTRIES - 1; s >= 0; s--) if (m[s]) lowest_slot = SLOT_W'(s);
  endfunction

  // tag hit in the row just read
  logic             tag_hit;
  logic [WAY_W-1:0] tag_way;
  always_comb begin
    tag_hit = 1'b0;
    tag_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (tg_rrow[w].valid && tg_rrow[w].tag == r_req.addr) begin
        tag_hit = 1'b1;
        tag_way = WAY_W'(w);
      end
  end

  logic [WAY_W-1:0]  ev_way;
  logic [SLOT_W-1:0] dr_slot;
  assign ev_way  = lowest_way(r_evict_mask);
  assign dr_slot = lowest_slot(r_vb_mask);

  // a new random set mapping, marked transitioned for this epoch
  logic [SET_W:0] fresh_entry;
  assign fresh_entry = {phase, rnd[SET_W-1:0]};

  // ---------------------------------------------------------------- control
  logic finish;   // request answered this cycle

  always_comb begin
    state_n       = state;
    req_ready     = 1'b0;
    resp_valid    = 1'b0;
    resp          = '0;
    mem_req_valid = 1'b0;
    mem_req       = '0;
    events        = '0;
    finish        = 1'b0;
    ep_miss       = 1'b0;
    ep_swap       = 1'b0;
    cln_step      = 1'b0;
    it_ra         = idx_cur;
    it_we         = 1'b0;
    it_wi         = r_victim_idx;
    it_we_entry   = fresh_entry;
    tg_rset       = r_sel_set;
    tg_we         = 1'b0;
    tg_wset       = r_sel_set;
    tg_wrow       = r_row;
    da_set        = r_sel_set;
    da_way        = r_fill_way;
    da_we         = 1'b0;
    da_wdata      = r_fill_data;
    vb_ins        = 1'b0;
    vb_upd        = 1'b0;
    vb_inv        = 1'b0;
    vb_inv_slot   = dr_slot;
    vb_view       = dr_slot;

    unique case (state)
      S_INIT: begin
        it_we       = (32'(init_cnt) < ITABLE_ENTRIES);
        it_wi       = IDX_W'(init_cnt);
        it_we_entry = {~phase, rnd[SET_W-1:0]};   // untransitioned
        tg_we       = (32'(init_cnt) < SETS);
        tg_wset     = SET_W'(init_cnt);
        for (int w = 0; w < WAYS; w++) tg_wrow[w] = '0;
        if (32'(init_cnt) == INIT_N - 1) state_n = S_IDLE;
      end

      S_IDLE: begin
        if (epoch_end && cln_done) begin
          ep_swap        = 1'b1;
          events.key_swap = 1'b1;
        end else if (cln_pending || epoch_end) begin
          state_n = S_CLN_RD;
        end else begin
          req_ready = 1'b1;
          if (req_valid) state_n = S_LOOKUP;
        end
      end

      S_LOOKUP: begin
        it_ra = idx_cur;
        if (vb_hit) begin
          events.vb_hit = 1'b1;
          vb_upd        = r_req.we;
          resp.rdata    = r_req.we ? r_req.wdata : vb_data;
          resp.hit      = 1'b1;
          resp.vb_hit   = 1'b1;
          finish        = 1'b1;
        end else begin
          state_n = S_ITAB;
        end
      end

      S_ITAB: begin
        events.used_target = ks_tgt;
        tg_rset            = ks_set;
        state_n            = S_TAG;
      end

      S_TAG: begin
        if (tag_hit) begin
          events.hit = 1'b1;
          da_way     = tag_way;
          if (r_req.we) begin
            da_we    = 1'b1;
            da_wdata = r_req.wdata;
            tg_we    = 1'b1;
            tg_wrow  = tg_rrow;
            tg_wrow[tag_way].dirty = 1'b1;
            resp.rdata = r_req.wdata;
            resp.hit   = 1'b1;
            finish     = 1'b1;
          end else begin
            state_n = S_DATA;
          end
        end else begin
          events.miss = 1'b1;
          ep_miss     = 1'b1;
          state_n     = r_req.we ? S_REPL : S_MEM_RD;
        end
      end

      S_DATA: begin
        resp.rdata = da_rdata;
        resp.hit   = 1'b1;
        finish     = 1'b1;
      end

      S_MEM_RD: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b0;
        mem_req.addr  = r_req.addr;
        if (mem_req_ready) state_n = S_MEM_WAIT;
      end

      S_MEM_WAIT: begin
        if (mem_resp_valid) state_n = S_REPL;
      end

      S_REPL: begin
        if (rp_free) begin
          events.free_fill = 1'b1;
          state_n          = S_FILL;
        end else if (rp_over) begin
          events.oversub = 1'b1;
          state_n        = S_VB_INS;
        end else begin
          events.multi_evict = ($countones(rp_mask) > 1);
          state_n            = S_EVICT;
        end
      end

      S_EVICT: begin
        da_way = ev_way;
        if (r_evict_mask == '0) state_n = S_VB_DRAIN;
        else if (r_row[ev_way].dirty) state_n = S_EVICT_RD;
      end

      S_EVICT_RD: begin
        state_n = S_WB;
      end

      S_WB: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = r_row[r_wb_way].tag;
        mem_req.wdata = r_wb_data;
        if (mem_req_ready) begin
          events.writeback = 1'b1;
          state_n          = S_EVICT;
        end
      end

      S_VB_DRAIN: begin
        vb_view = dr_slot;
        if (r_vb_mask == '0) begin
          state_n = r_cleaning ? S_CLN_REFRESH : S_FILL;
        end else if (vb_vdirty) begin
          mem_req_valid = 1'b1;
          mem_req.we    = 1'b1;
          mem_req.addr  = vb_vaddr;
          mem_req.wdata = vb_vdata;
          if (mem_req_ready) begin
            events.writeback = 1'b1;
            events.vb_drain  = 1'b1;
            vb_inv           = 1'b1;
          end
        end else begin
          events.vb_drain = 1'b1;
          vb_inv          = 1'b1;
        end
      end

      S_FILL: begin
        da_way   = r_fill_way;
        da_we    = 1'b1;
        da_wdata = r_fill_data;
        tg_we    = 1'b1;
        tg_wrow  = r_row;
        tg_wrow[r_fill_way] = '{valid: 1'b1, dirty: r_req.we, tag: r_req.addr,
                                idx: way_idx_t'(r_sel_idx)};
        if (r_evicting) begin
          it_we          = 1'b1;
          it_wi          = r_victim_idx;
          it_we_entry    = fresh_entry;
          events.refresh = 1'b1;
        end
        resp.rdata = r_fill_data;
        finish     = 1'b1;
      end

      S_VB_INS: begin
        vb_view = vb_alloc;
        if (vb_full && vb_vdirty) begin
          mem_req_valid = 1'b1;
          mem_req.we    = 1'b1;
          mem_req.addr  = vb_vaddr;
          mem_req.wdata = vb_vdata;
          if (mem_req_ready) begin
            events.writeback     = 1'b1;
            events.vb_full_evict = 1'b1;
            vb_ins               = 1'b1;
            resp.rdata           = r_fill_data;
            finish               = 1'b1;
          end
        end else begin
          events.vb_full_evict = vb_full;
          vb_ins               = 1'b1;
          resp.rdata           = r_fill_data;
          finish               = 1'b1;
        end
      end

      S_CLN_RD: begin
        it_ra   = cln_ptr;
        state_n = S_CLN_IT;
      end

      S_CLN_IT: begin
        events.clean_step = 1'b1;
        tg_rset           = it_ea[SET_W-1:0];
        if (it_ea[SET_W] == phase) begin
          cln_step = 1'b1;            // already transitioned
          state_n  = S_IDLE;
        end else begin
          events.clean_evict = 1'b1;
          state_n            = S_CLN_TAG;
        end
      end

      S_CLN_TAG: begin
        state_n = S_EVICT;
      end

      S_CLN_REFRESH: begin
        tg_we          = 1'b1;
        tg_wset        = r_sel_set;
        tg_wrow        = r_row;
        it_we          = 1'b1;
        it_wi          = r_victim_idx;
        it_we_entry    = fresh_entry;
        events.refresh = 1'b1;
        cln_step       = 1'b1;
        state_n        = S_IDLE;
      end

      default: state_n = S_IDLE;
    endcase

    if (finish) begin
      resp_valid = 1'b1;
      state_n    = S_IDLE;
    end
  end

  // ---------------------------------------------------------------- datapath
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_INIT;
      init_cnt    <= '0;
      cln_pending <= 1'b0;
      r_cleaning  <= 1'b0;
      r_evicting  <= 1'b0;
      r_req       <= '0;
    end else begin
      state <= state_n;
      if (state == S_INIT) init_cnt <= init_cnt + 1'b1;
      if (finish && second_half && !cln_done) cln_pending <= 1'b1;
      if (state == S_IDLE && state_n == S_CLN_RD) cln_pending <= 1'b0;
      if (state == S_IDLE && req_valid && req_ready) begin
        r_req      <= req;
        r_cleaning <= 1'b0;
        r_evicting <= 1'b0;
      end
      if (state == S_CLN_RD) r_cleaning <= 1'b1;
      if (state == S_REPL && !rp_free && !rp_over) r_evicting <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    unique case (state)
      S_LOOKUP: begin
        r_idx_cur <= idx_cur;
        r_idx_tgt <= idx_tgt;
      end
      S_ITAB: begin
        r_sel_idx <= ks_idx;
        r_sel_set <= ks_set;
      end
      S_TAG: begin
        r_row       <= tg_rrow;
        r_fill_data <= r_req.wdata;
      end
      S_MEM_WAIT: if (mem_resp_valid) r_fill_data <= mem_resp_data;
      S_REPL: begin
        r_evict_mask <= rp_mask;
        r_victim_idx <= IDX_W'(rp_victim);
        r_fill_way   <= rp_free ? rp_free_way : rp_fill_way;
      end
      S_EVICT: begin
        if (r_evict_mask == '0) begin
          r_vb_mask <= vb_match;
        end else begin
          r_wb_way <= ev_way;
          if (!r_row[ev_way].dirty) begin
            r_row[ev_way].valid   <= 1'b0;
            r_evict_mask[ev_way]  <= 1'b0;
          end
        end
      end
      S_EVICT_RD: r_wb_data <= da_rdata;
      S_WB: if (mem_req_ready) begin
        r_row[r_wb_way].valid   <= 1'b0;
        r_evict_mask[r_wb_way]  <= 1'b0;
      end
      S_VB_DRAIN: if (vb_inv) r_vb_mask[dr_slot] <= 1'b0;
      S_CLN_IT: begin
        r_sel_set    <= it_ea[SET_W-1:0];
        r_victim_idx <= cln_ptr;
      end
      S_CLN_TAG: begin
        r_row <= tg_rrow;
        for (int w = 0; w < WAYS; w++)
          r_evict_mask[w] <= tg_rrow[w].valid && (tg_rrow[w].idx == way_idx_t'(r_victim_idx));
      end
      default: ;
    endcase
  end

  assign init_done    = (state != S_INIT);
  assign epoch_misses = 32'(ep_count);
  assign vb_occupancy = 8'(vb_count);

  // ---------------------------------------------------------------- checks
  // A memory request is held stable until it is taken.
  a_mem_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
  // A replacement never refreshes the entry of the line being filled.
  a_no_self_refresh: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_FILL && r_evicting |-> r_victim_idx != r_sel_idx);

endmodule
