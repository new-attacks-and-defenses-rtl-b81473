// dedrp_key_select: ordered key select with precedence logic.
//
// An address selects entry i with the current key and entry j with the target
// key. Entry i takes precedence: if it has not yet transitioned in this epoch,
// the line lives in set S_i; once i has transitioned it may only be reached
// through the target key, so the line lives in set S_j. Only one set is then
// searched.
//
// An entry counts as transitioned when its refresh bit equals the epoch phase.
// Flipping the phase at a key swap therefore makes every entry untransitioned
// at once without rewriting the table; the phase trick is this design's
// choice, the precedence rule is the paper's.
//
// Interface and timing: combinational.
module dedrp_key_select #(
  parameter int unsigned IDX_W = 15,
  parameter int unsigned SET_W = 11
) (
  input  logic [IDX_W-1:0] idx_cur,
  input  logic [SET_W:0]   ent_cur,
  input  logic [IDX_W-1:0] idx_tgt,
  input  logic [SET_W:0]   ent_tgt,
  input  logic             phase,
  output logic [IDX_W-1:0] sel_idx,
  output logic [SET_W-1:0] sel_set,
  output logic             used_target
);

  // ent[SET_W] is the refresh bit; transitioned when it equals phase.
  assign used_target = (ent_cur[SET_W] == phase);
  assign sel_idx     = used_target ? idx_tgt : idx_cur;
  assign sel_set     = used_target ? ent_tgt[SET_W-1:0] : ent_cur[SET_W-1:0];

endmodule
