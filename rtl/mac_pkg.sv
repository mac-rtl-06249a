// mac_pkg: types, sizes and policy tables shared by the MAC L2 cache.
//
// MAC ("Multilayer Ark for Cache") labels every cache block with a 2-bit
// protection level FDL (Fresh-Dirty Level) built from a freshness level FL
// (1 = re-referenced since it was last demoted, 2 = not) and a dirty level DL
// (1 = dirty, 2 = clean). The four levels, from safest to first-evicted, are
//   FDL1 = (FL1, DL1)  FDL2 = (FL1, DL2)  FDL3 = (FL2, DL1)  FDL4 = (FL2, DL2).
// The encoding stores FDL-1, so bit 1 is FL-1 and bit 0 is DL-1: bit 0 set
// means the block is clean. That mapping follows the paper's correspondence
// table of FL, DL and FDL; the bit encoding itself is this design's choice.
//
// The sizes are those of the evaluated shared L2: 512 KB, 16 ways, 64-byte
// lines, 8 banks, behind an 8 GB PCM main memory, with a 15-cycle hit latency.
package mac_pkg;

  // ---- cache geometry (paper's baseline configuration) -------------------
  localparam int unsigned WAYS        = 16;
  localparam int unsigned WAY_W       = $clog2(WAYS);       // 4-bit LRU position
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;     // 512
  localparam int unsigned CACHE_BYTES = 512 * 1024;
  localparam int unsigned BANKS       = 8;
  localparam int unsigned ADDR_W      = 33;                 // 8 GB PCM, byte address
  localparam int unsigned HIT_LATENCY = 15;                 // L2 hit latency, cycles
  localparam int unsigned SETS_PER_BANK = CACHE_BYTES / LINE_BYTES / WAYS / BANKS; // 64
  localparam int unsigned LEVELS      = 4;                  // N_T = N_1 * N_2 = 2 * 2

  // ---- protection level ---------------------------------------------------
  typedef enum logic [1:0] {
    FDL1 = 2'd0,   // fresh, dirty  (safest)
    FDL2 = 2'd1,   // fresh, clean
    FDL3 = 2'd2,   // stale, dirty
    FDL4 = 2'd3    // stale, clean  (evicted first)
  } fdl_e;

  // Request seen by the L2: a read is a load/store miss of an L1, a write is
  // an L1 write-back of a whole line.
  typedef enum logic {
    REQ_READ  = 1'b0,
    REQ_WRITE = 1'b1
  } req_kind_e;

  // Which step of the victim algorithm fired.
  typedef enum logic [2:0] {
    VS_INVALID = 3'd0,  // an empty way was available, no demotion
    VS_A       = 3'd1,  // LRU block of level 4 evicted
    VS_B       = 3'd2,  // LRU of level 3 evicted, LRU of 2 -> 4, LRU of 1 -> 3
    VS_C       = 3'd3,  // LRU of level 2 evicted, LRU of 1 -> 3
    VS_D       = 3'd4   // all blocks level 1, plain LRU eviction
  } vstep_e;

  // Replacement state of one set: global LRU chain position of each way
  // (0 = MRU, WAYS-1 = LRU), FDL of each way, and the four level-LRU
  // registers (way number of the least recently used block of each level).
  typedef struct packed {
    logic [WAYS-1:0][WAY_W-1:0]   pos;
    fdl_e [WAYS-1:0]              fdl;
    logic [LEVELS-1:0][WAY_W-1:0] lvl_lru;
  } set_state_t;

  function automatic logic fdl_is_dirty(fdl_e f);
    return (f == FDL1) || (f == FDL3);
  endfunction

  // Insertion: a new block is stale (FL 2); a read miss makes it clean
  // (FDL4), a write miss dirty (FDL3).
  function automatic fdl_e fdl_insert(req_kind_e k);
    return (k == REQ_WRITE) ? FDL3 : FDL4;
  endfunction

  // Promotion on a hit: FL becomes 1. A dirty block or a write hit gives
  // FDL1, a read hit on a clean block FDL2.
  function automatic fdl_e fdl_promote(fdl_e f, req_kind_e k);
    return (k == REQ_WRITE || fdl_is_dirty(f)) ? FDL1 : FDL2;
  endfunction

  // Reset state of a set: way w at chain position w, every level-LRU
  // register 0. The FDLs of empty ways are never read.
  function automatic set_state_t set_state_reset();
    set_state_t s;
    for (int w = 0; w < WAYS; w++) begin
      s.pos[w] = WAY_W'(w);
      s.fdl[w] = FDL4;
    end
    s.lvl_lru = '0;
    return s;
  endfunction

endpackage
