// mac_victim_select: the MAC victim algorithm for one cache set.
//
// Purely combinational. From the FDL of every way, the valid bits and the
// four level-LRU registers of the set it picks the way to evict and the
// demotions that go with the eviction, in the order of the paper's steps:
//   a. any level-4 block: evict the LRU one of level 4;
//   b. else any level-3 block: evict the LRU one of level 3, demote the LRU
//      block of level 2 to level 4 and the LRU block of level 1 to level 3;
//   c. else any level-2 block: evict the LRU one of level 2, demote the LRU
//      block of level 1 to level 3;
//   d. else every block is level 1: evict the LRU one.
// A demotion is only requested when its level holds a block (the paper's
// pseudo-code does not say what happens when it is empty; here nothing is
// moved). Demoted blocks are also moved to the MRU end of the global LRU
// chain; that move is done by mac_set_update.
//
// Before the set is full, an empty way is used and nothing is demoted: the
// paper only treats full sets, so filling empty ways first (lowest way
// number first) is this design's choice. Whether a level is empty is worked
// out from the FDLs and valid bits; the level-LRU registers only hold way
// numbers.
module mac_victim_select
  import mac_pkg::*;
(
  input  logic [WAYS-1:0]             valid,
  input  fdl_e [WAYS-1:0]             fdl,
  input  logic [LEVELS-1:0][WAY_W-1:0] lvl_lru,
  output logic [WAY_W-1:0]            victim,
  output vstep_e                      step,
  output logic                        demote_l2,   // move lvl_lru[FDL2] to FDL4
  output logic [WAY_W-1:0]            demote_l2_way,
  output logic                        demote_l1,   // move lvl_lru[FDL1] to FDL3
  output logic [WAY_W-1:0]            demote_l1_way,
  output logic [LEVELS-1:0]           level_busy   // level holds a valid block
);

  logic             any_invalid;
  logic [WAY_W-1:0] first_invalid;

  always_comb begin
    level_busy    = '0;
    any_invalid   = 1'b0;
    first_invalid = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid[w]) level_busy[fdl[w]] = 1'b1;
      else begin
        any_invalid   = 1'b1;
        first_invalid = WAY_W'(w);
      end
    end
  end

  assign demote_l2_way = lvl_lru[FDL2];
  assign demote_l1_way = lvl_lru[FDL1];

  always_comb begin
    victim    = '0;
    step      = VS_INVALID;
    demote_l2 = 1'b0;
    demote_l1 = 1'b0;
    if (any_invalid) begin
      victim = first_invalid;
      step   = VS_INVALID;
    end else if (level_busy[FDL4]) begin
      victim = lvl_lru[FDL4];
      step   = VS_A;
    end else if (level_busy[FDL3]) begin
      victim    = lvl_lru[FDL3];
      step      = VS_B;
      demote_l2 = level_busy[FDL2];
      demote_l1 = level_busy[FDL1];
    end else if (level_busy[FDL2]) begin
      victim    = lvl_lru[FDL2];
      step      = VS_C;
      demote_l1 = level_busy[FDL1];
    end else begin
      victim = lvl_lru[FDL1];
      step   = VS_D;
    end
  end

endmodule
