// dedrp_repl: iTable-aware replacement policy.
//
// On a miss in a set, an entry of the iTable can only be transitioned (given a
// new random set) once every line it maps has left the cache. To get there
// quickly the policy evicts whole groups: it classifies the lines of the set
// by the iTable entry stored with each line, picks one of these entries at
// random and evicts all of its lines together.
//
// Rules, in order:
//   1. If a way is invalid, fill it (has_free), evict nothing.
//   2. Otherwise the candidates are the distinct iTable entries held in the
//      set other than miss_idx, the entry of the missing line. Refreshing
//      miss_idx itself would move the set the new line is going into, so it
//      is never chosen. One candidate is picked uniformly (rnd modulo the
//      number of candidates); evict_mask marks all ways holding it, and the
//      new line goes into the lowest of them.
//   3. If every way holds a line of miss_idx there is no candidate: the entry
//      is oversubscribed and the line must go to the victim buffer.
//
// Grouping and random choice among entries follow the paper; rules 1 and 3
// and the exclusion of miss_idx are this design's reading of it.
//
// Interface and timing: combinational.
module dedrp_repl
  import dedrp_pkg::*;
#(
  parameter int unsigned WAYS = 8,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  way_meta_t        meta [WAYS],
  input  way_idx_t         miss_idx,
  input  logic [15:0]      rnd,
  output logic             has_free,
  output logic [WAY_W-1:0] free_way,
  output logic             oversubscribed,
  output logic [WAYS-1:0]  evict_mask,
  output way_idx_t         victim_idx,
  output logic [WAY_W-1:0] fill_way
);

  logic [WAYS-1:0]  eligible;
  logic [WAY_W:0]   n_elig;
  logic [WAY_W:0]   pick;
  logic [WAY_W-1:0] victim_way;

  always_comb begin
    has_free = 1'b0;
    free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!meta[w].valid) begin
        has_free = 1'b1;
        free_way = WAY_W'(w);
      end
    end
  end

  // A way is eligible if it is the first way holding a candidate entry.
  always_comb begin
    eligible = '0;
    n_elig   = '0;
    for (int w = 0; w < WAYS; w++) begin
      logic first;
      first = meta[w].valid && (meta[w].idx != miss_idx);
      for (int u = 0; u < w; u++)
        if (meta[u].valid && meta[u].idx == meta[w].idx) first = 1'b0;
      eligible[w] = first;
      n_elig      = n_elig + (WAY_W+1)'(first);
    end
  end

  always_comb begin
    int unsigned seen;
    pick       = (n_elig == 0) ? '0 : (WAY_W+1)'(rnd % 16'(n_elig));
    victim_way = '0;
    seen       = 0;
    for (int w = 0; w < WAYS; w++) begin
      if (eligible[w]) begin
        if (seen == int'(pick)) victim_way = WAY_W'(w);
        seen++;
      end
    end
  end

  always_comb begin
    logic found;
    oversubscribed = !has_free && (n_elig == 0);
    victim_idx     = meta[victim_way].idx;
    evict_mask     = '0;
    if (!has_free && n_elig != 0)
      for (int w = 0; w < WAYS; w++)
        evict_mask[w] = meta[w].valid && (meta[w].idx == victim_idx);
    fill_way = free_way;
    found    = 1'b0;
    if (!has_free)
      for (int w = 0; w < WAYS; w++)
        if (evict_mask[w] && !found) begin
          fill_way = WAY_W'(w);
          found    = 1'b1;
        end
  end

endmodule
