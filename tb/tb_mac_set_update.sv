// tb_mac_set_update: drives one set through thousands of random hits and
// misses and compares the replacement state with a reference model.
//
// The reference keeps the global LRU chain as an ordered list of way numbers
// (MRU first) and applies the policy rules directly: it finds a level's LRU
// block by scanning the list from the LRU end, fills empty ways first, and
// demotes / inserts / promotes as the MAC rules say. After every access the
// DUT's positions, FDLs, valid bits, victim, step and level-LRU registers are
// checked against it; the DUT's output state is fed back as its next input.
module tb_mac_set_update;
  import mac_pkg::*;

  set_state_t       st, st_n;
  logic [WAYS-1:0]  vld, vld_n;
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim;
  req_kind_e        kind;
  vstep_e           step;
  logic             dm2, dm1;

  mac_set_update dut (
    .state_in(st), .valid_in(vld), .hit(hit), .hit_way(hit_way), .kind(kind),
    .state_out(st_n), .valid_out(vld_n), .victim(victim), .step(step),
    .demote_l2(dm2), .demote_l1(dm1));

  int checks = 0, failures = 0;
  int step_seen [5];

  // reference model
  int   chain [$];          // way numbers, index 0 = MRU
  fdl_e rfdl  [WAYS];
  bit   rvld  [WAYS];

  function automatic int lru_of(fdl_e l);
    for (int i = chain.size() - 1; i >= 0; i--)
      if (rvld[chain[i]] && rfdl[chain[i]] == l) return chain[i];
    return -1;
  endfunction

  function automatic void mru(int w);
    foreach (chain[i]) if (chain[i] == w) begin chain.delete(i); break; end
    chain.push_front(w);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int    rv, rstep, l4, l3, l2, l1;
    bit    all_valid;
    st  = set_state_reset();
    vld = '0;
    for (int w = 0; w < WAYS; w++) begin chain.push_back(w); rfdl[w] = FDL4; rvld[w] = 0; end
    for (int n = 0; n < 20000; n++) begin
      // pick an access: hit on a random valid way or a miss
      all_valid = &vld;
      kind = req_kind_e'($urandom_range(0, 1));
      hit  = (vld != 0) && ($urandom_range(0, 99) < (n % 1000 < 500 ? 70 : 20));
      hit_way = '0;
      if (hit) begin
        do hit_way = WAY_W'($urandom_range(0, WAYS - 1)); while (!vld[hit_way]);
      end
      #1;
      // reference
      if (hit) begin
        rfdl[hit_way] = (kind == REQ_WRITE || rfdl[hit_way] inside {FDL1, FDL3}) ? FDL1 : FDL2;
        mru(int'(hit_way));
      end else begin
        rv = -1; rstep = 0;
        for (int w = 0; w < WAYS; w++) if (!rvld[w]) begin rv = w; break; end
        if (rv < 0) begin
          l4 = lru_of(FDL4); l3 = lru_of(FDL3); l2 = lru_of(FDL2); l1 = lru_of(FDL1);
          if (l4 >= 0)      begin rv = l4; rstep = 1; end
          else if (l3 >= 0) begin
            rv = l3; rstep = 2;
            if (l2 >= 0) begin rfdl[l2] = FDL4; mru(l2); end
            if (l1 >= 0) begin rfdl[l1] = FDL3; mru(l1); end
          end else if (l2 >= 0) begin
            rv = l2; rstep = 3;
            if (l1 >= 0) begin rfdl[l1] = FDL3; mru(l1); end
          end else begin rv = l1; rstep = 4; end
        end
        check(int'(victim) == rv, $sformatf("n=%0d victim %0d exp %0d", n, victim, rv));
        check(int'(step) == rstep, $sformatf("n=%0d step %0d exp %0d", n, step, rstep));
        step_seen[rstep]++;
        rfdl[rv] = (kind == REQ_WRITE) ? FDL3 : FDL4;
        rvld[rv] = 1;
        mru(rv);
      end
      foreach (chain[i])
        check(int'(st_n.pos[chain[i]]) == i,
              $sformatf("n=%0d way %0d pos %0d exp %0d", n, chain[i], st_n.pos[chain[i]], i));
      for (int w = 0; w < WAYS; w++) begin
        check(vld_n[w] == rvld[w], $sformatf("n=%0d valid[%0d]", n, w));
        if (rvld[w]) check(st_n.fdl[w] == rfdl[w],
                           $sformatf("n=%0d fdl[%0d]=%0d exp %0d", n, w, st_n.fdl[w], rfdl[w]));
      end
      for (int l = 0; l < LEVELS; l++)
        if (lru_of(fdl_e'(l)) >= 0)
          check(int'(st_n.lvl_lru[l]) == lru_of(fdl_e'(l)), $sformatf("n=%0d lvl_lru[%0d]", n, l));
      st  = st_n;
      vld = vld_n;
      // occasionally empty the set again so the fill path keeps being tested
      if (n % 5000 == 4999) begin
        st = set_state_reset(); vld = '0;
        chain.delete();
        for (int w = 0; w < WAYS; w++) begin chain.push_back(w); rfdl[w] = FDL4; rvld[w] = 0; end
      end
    end
    for (int s = 0; s < 5; s++) begin
      $display("victim step %0d taken %0d times", s, step_seen[s]);
      check(step_seen[s] > 0, $sformatf("victim step %0d never taken", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
