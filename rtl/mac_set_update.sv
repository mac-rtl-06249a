// mac_set_update: next replacement state of one set under MAC.
//
// Purely combinational. Given the present state of a set (global LRU chain
// positions, FDLs, level-LRU registers), its valid bits and one access, it
// returns the state after the access:
//   hit  : the hit way gets its promoted FDL (read hit: dirty -> 1,
//          clean -> 2; write hit: 1) and moves to the MRU end of the chain.
//   miss : mac_victim_select picks the victim; the demoted blocks get their
//          new FDLs and move to the MRU end (first the level-2 block, then
//          the level-1 block, as the paper orders them); then the new block
//          takes the victim's way with FDL 3 (write miss) or 4 (read miss)
//          and becomes the MRU block.
// Moving way w to MRU sets its position to 0 and adds one to every position
// that was below w's, so the positions stay a permutation of 0..WAYS-1.
// Afterwards the four level-LRU registers are recomputed from the new state:
// each holds the valid way of that level with the largest chain position.
// The paper keeps these as 4-bit registers per set but does not say how they
// are maintained; recomputing them at every update is this design's choice.
// An empty level leaves its register at way 0; it is never used then.
module mac_set_update
  import mac_pkg::*;
(
  input  set_state_t       state_in,
  input  logic [WAYS-1:0]  valid_in,
  input  logic             hit,        // 1: access hit hit_way, 0: miss
  input  logic [WAY_W-1:0] hit_way,
  input  req_kind_e        kind,
  output set_state_t       state_out,
  output logic [WAYS-1:0]  valid_out,
  output logic [WAY_W-1:0] victim,     // way that receives the new block
  output vstep_e           step,
  output logic             demote_l2,
  output logic             demote_l1
);

  logic [WAY_W-1:0]  demote_l2_way, demote_l1_way;
  logic [LEVELS-1:0] level_busy;

  mac_victim_select u_vs (
    .valid         (valid_in),
    .fdl           (state_in.fdl),
    .lvl_lru       (state_in.lvl_lru),
    .victim        (victim),
    .step          (step),
    .demote_l2     (demote_l2),
    .demote_l2_way (demote_l2_way),
    .demote_l1     (demote_l1),
    .demote_l1_way (demote_l1_way),
    .level_busy    (level_busy)
  );

  function automatic logic [WAYS-1:0][WAY_W-1:0] to_mru(
      logic [WAYS-1:0][WAY_W-1:0] p, logic [WAY_W-1:0] w);
    logic [WAYS-1:0][WAY_W-1:0] q;
    for (int v = 0; v < WAYS; v++) begin
      if (WAY_W'(v) == w)  q[v] = '0;
      else if (p[v] < p[w]) q[v] = p[v] + 1'b1;
      else                 q[v] = p[v];
    end
    return q;
  endfunction

  set_state_t s;

  always_comb begin
    s         = state_in;
    valid_out = valid_in;
    if (hit) begin
      s.fdl[hit_way] = fdl_promote(state_in.fdl[hit_way], kind);
      s.pos          = to_mru(s.pos, hit_way);
    end else begin
      if (demote_l2) begin
        s.fdl[demote_l2_way] = FDL4;
        s.pos                = to_mru(s.pos, demote_l2_way);
      end
      if (demote_l1) begin
        s.fdl[demote_l1_way] = FDL3;
        s.pos                = to_mru(s.pos, demote_l1_way);
      end
      s.fdl[victim]     = fdl_insert(kind);
      s.pos             = to_mru(s.pos, victim);
      valid_out[victim] = 1'b1;
    end
    // level-LRU registers of the new state
    s.lvl_lru = '0;
    for (int l = 0; l < LEVELS; l++) begin
      logic             found;
      logic [WAY_W-1:0] best;
      found = 1'b0;
      best  = '0;
      for (int w = 0; w < WAYS; w++) begin
        if (valid_out[w] && s.fdl[w] == fdl_e'(l) &&
            (!found || s.pos[w] > s.pos[best])) begin
          found = 1'b1;
          best  = WAY_W'(w);
        end
      end
      s.lvl_lru[l] = best;
    end
    state_out = s;
  end

endmodule
