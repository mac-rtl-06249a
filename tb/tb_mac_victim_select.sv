// tb_mac_victim_select: random sets (valid bits, FDLs, level-LRU registers)
// against a reference that applies the victim steps a-d literally. Every
// step, including the empty-way fill and demotions with an empty source
// level, is required to occur.
module tb_mac_victim_select;
  import mac_pkg::*;

  logic [WAYS-1:0]              valid;
  fdl_e [WAYS-1:0]              fdl;
  logic [LEVELS-1:0][WAY_W-1:0] lvl_lru;
  logic [WAY_W-1:0]             victim, d2w, d1w;
  vstep_e                       step;
  logic                         d2, d1;
  logic [LEVELS-1:0]            busy;

  mac_victim_select dut (.valid(valid), .fdl(fdl), .lvl_lru(lvl_lru), .victim(victim),
    .step(step), .demote_l2(d2), .demote_l2_way(d2w), .demote_l1(d1),
    .demote_l1_way(d1w), .level_busy(busy));

  int checks = 0, failures = 0;
  int seen [5];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit has [4]; int ev, es, inv; bit e2, e1;
    for (int n = 0; n < 20000; n++) begin
      int mask;
      mask  = $urandom_range(1, 15);           // which levels may appear
      valid = ($urandom_range(0, 3) == 0) ? WAYS'($urandom) : '1;
      for (int w = 0; w < WAYS; w++) begin
        int l;
        do l = $urandom_range(0, 3); while (!mask[l]);
        fdl[w] = fdl_e'(l);
      end
      for (int l = 0; l < 4; l++) lvl_lru[l] = WAY_W'($urandom);
      #1;
      has = '{default: 0}; inv = -1;
      for (int w = WAYS - 1; w >= 0; w--) if (!valid[w]) inv = w; else has[fdl[w]] = 1;
      e2 = 0; e1 = 0;
      if (inv >= 0)     begin ev = inv; es = 0; end
      else if (has[3])  begin ev = lvl_lru[3]; es = 1; end
      else if (has[2])  begin ev = lvl_lru[2]; es = 2; e2 = has[1]; e1 = has[0]; end
      else if (has[1])  begin ev = lvl_lru[1]; es = 3; e1 = has[0]; end
      else              begin ev = lvl_lru[0]; es = 4; end
      seen[es]++;
      check(int'(victim) == ev, $sformatf("victim %0d exp %0d", victim, ev));
      check(int'(step) == es, $sformatf("step %0d exp %0d", step, es));
      check(d2 == e2 && d1 == e1, "demote flags");
      if (e2) check(d2w == lvl_lru[1], "demote_l2 way");
      if (e1) check(d1w == lvl_lru[0], "demote_l1 way");
      for (int l = 0; l < 4; l++) check(busy[l] == has[l], "level_busy");
    end
    for (int s = 0; s < 5; s++) check(seen[s] > 0, $sformatf("step %0d never seen", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
