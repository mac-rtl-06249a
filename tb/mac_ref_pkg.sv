// mac_ref_pkg: reference model of a MAC-managed set-associative cache, used
// by the cache testbenches to predict hits, victims and write-backs.
//
// Each set keeps its global LRU chain as a list of way numbers (MRU first)
// and the FDL (1..4), tag, valid and dirty bit of each way. access() applies
// the policy rules directly: on a hit the block is promoted and moved to MRU;
// on a miss an empty way is filled first, otherwise the victim steps a-d
// are followed, with the demoted blocks moved to MRU before the new block.
// The line-data model (what a read must return) is kept separately.
package mac_ref_pkg;

  class mac_ref_cache;
    int unsigned nsets, ways, set_bits;
    int          chain [][$];
    int          fdl   [][];
    longint      tag   [][];
    bit          vld   [][];
    bit          dirty [][];

    function new(int unsigned nsets_, int unsigned ways_);
      nsets = nsets_; ways = ways_; set_bits = $clog2(nsets_);
      chain = new[nsets]; fdl = new[nsets]; tag = new[nsets];
      vld = new[nsets]; dirty = new[nsets];
      for (int s = 0; s < nsets; s++) begin
        fdl[s] = new[ways]; tag[s] = new[ways]; vld[s] = new[ways]; dirty[s] = new[ways];
        for (int w = 0; w < ways; w++) begin
          chain[s].push_back(w); fdl[s][w] = 4; vld[s][w] = 0; dirty[s][w] = 0; tag[s][w] = 0;
        end
      end
    endfunction

    function int lru_of(int s, int l);
      for (int i = chain[s].size() - 1; i >= 0; i--)
        if (vld[s][chain[s][i]] && fdl[s][chain[s][i]] == l) return chain[s][i];
      return -1;
    endfunction

    function void mru(int s, int w);
      foreach (chain[s][i]) if (chain[s][i] == w) begin chain[s].delete(i); break; end
      chain[s].push_front(w);
    endfunction

    // line: line address (byte address / 64). Returns 1 on a hit. On a miss
    // that evicts a dirty block, wb = 1 and wb_line is that block's line.
    // step: 0 empty way, 1..4 = victim steps a..d, -1 for a hit.
    function bit access(longint line, bit write, output bit wb, output longint wb_line,
                        output int step);
      int s, v, l4, l3, l2, l1;
      longint t;
      s = int'(line % nsets); t = line / nsets;
      wb = 0; wb_line = 0; step = -1;
      for (int w = 0; w < ways; w++)
        if (vld[s][w] && tag[s][w] == t) begin
          fdl[s][w] = (write || fdl[s][w] == 1 || fdl[s][w] == 3) ? 1 : 2;
          if (write) dirty[s][w] = 1;
          mru(s, w);
          return 1;
        end
      v = -1;
      for (int w = 0; w < ways; w++) if (!vld[s][w]) begin v = w; step = 0; break; end
      if (v < 0) begin
        l4 = lru_of(s, 4); l3 = lru_of(s, 3); l2 = lru_of(s, 2); l1 = lru_of(s, 1);
        if (l4 >= 0) begin v = l4; step = 1; end
        else if (l3 >= 0) begin
          v = l3; step = 2;
          if (l2 >= 0) begin fdl[s][l2] = 4; mru(s, l2); end
          if (l1 >= 0) begin fdl[s][l1] = 3; mru(s, l1); end
        end else if (l2 >= 0) begin
          v = l2; step = 3;
          if (l1 >= 0) begin fdl[s][l1] = 3; mru(s, l1); end
        end else begin v = l1; step = 4; end
        if (dirty[s][v]) begin wb = 1; wb_line = tag[s][v] * nsets + s; end
      end
      vld[s][v] = 1; tag[s][v] = t; dirty[s][v] = write;
      fdl[s][v] = write ? 3 : 4;
      mru(s, v);
      return 0;
    endfunction
  endclass

  // Content of a PCM line that was never written: a pattern made from the
  // line address, so every line's data differs.
  function automatic logic [511:0] pcm_init_line(longint line);
    logic [511:0] d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = 32'(line * 16 + i) ^ 32'h5A5A_0000;
    return d;
  endfunction

endpackage
