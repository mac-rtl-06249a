// tb_mac_l2_cache: end-to-end test of the 8-bank MAC L2 cache at its default
// size (512 KB, 16 ways, 8 banks), with a PCM model behind it.
//
// A stream of reads and line write-backs is offered back to back; requests
// to different banks overlap, responses return out of order and are
// sometimes held off. The reference MAC cache model is advanced when a
// request is accepted (each bank serves its requests in acceptance order),
// which gives the expected hit flag and data of every response and the
// expected order of dirty-victim write-backs of every bank; each PCM write
// is checked against it. The run counts every mechanism the design has:
// hits, fills into empty ways, victim steps a-d, the two demotions, PCM
// write-backs, banks working in parallel, contention for the PCM port and
// response back-pressure; a mechanism that never happens is a failure.
// The cache runs with all parameters at their defaults and the PCM model with
// the evaluated system's latencies (1024-cycle read, 4096-cycle write).
module tb_mac_l2_cache;
  import mac_pkg::*;
  import mac_ref_pkg::*;

  localparam int unsigned NSETS = BANKS * SETS_PER_BANK;   // all sets
  localparam int unsigned NREQ  = 6000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid, resp_ready, resp_hit;
  req_kind_e req_kind, resp_kind;
  logic [ADDR_W-1:0] req_addr, mem_req_addr;
  logic [7:0] req_id, resp_id;
  logic [LINE_BITS-1:0] req_wdata, resp_rdata, mem_req_wdata, mem_resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [2:0] mem_req_id, mem_resp_id;
  logic [BANKS-1:0] miss_evt, dm2, dm1;
  vstep_e [BANKS-1:0] miss_step;

  mac_l2_cache dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_kind, .req_addr, .req_id, .req_wdata,
    .resp_valid, .resp_ready, .resp_kind, .resp_id, .resp_hit, .resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_id,
    .mem_req_wdata, .mem_resp_valid, .mem_resp_id, .mem_resp_rdata,
    .miss_evt, .miss_step, .miss_demote_l2(dm2), .miss_demote_l1(dm1));

  pcm_model #(.ADDR_W(ADDR_W), .ID_W(3)) u_pcm (   // 1024 / 4096-cycle PCM
    .clk(clk), .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_write(mem_req_write),
    .req_addr(mem_req_addr), .req_id(mem_req_id), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_id(mem_resp_id), .resp_rdata(mem_resp_rdata));

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_dm2 = 0, n_dm1 = 0, n_resp = 0;
  int n_parallel = 0, n_mem_contend = 0, n_backpressure = 0;
  int step_seen [5];
  int cyc = 0;
  mac_ref_cache ref_c;
  logic [511:0] latest [longint];
  longint exp_wb [BANKS][$];
  // per outstanding id: expected hit, expected data, is read, accept cycle
  bit           o_hit  [256];
  bit           o_rd   [256];
  logic [511:0] o_data [256];
  int           o_cyc  [256];
  bit           o_busy [256];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %0d: %s", cyc, what); end
  endtask

  function automatic logic [511:0] line_data(longint l);
    return latest.exists(l) ? latest[l] : pcm_init_line(l);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitors: PCM writes, mechanisms
  always @(posedge clk) if (rst_n) begin
    int busy_banks, mem_wanting;
    if (mem_req_valid && mem_req_ready && mem_req_write) begin
      longint l;
      int     b;
      l = longint'(mem_req_addr >> 6);
      b = int'(l % BANKS);
      n_wb++;
      check(int'(mem_req_id) == b, "PCM request id is not the bank");
      check(exp_wb[b].size() > 0, "unexpected PCM write");
      if (exp_wb[b].size() > 0) begin
        check(l == exp_wb[b][0], $sformatf("bank %0d PCM write line %0h exp %0h", b, l, exp_wb[b][0]));
        void'(exp_wb[b].pop_front());
      end
      check(mem_req_wdata == line_data(l), "PCM write data");
    end
    for (int b = 0; b < BANKS; b++) if (miss_evt[b]) begin
      if (dm2[b]) n_dm2++;
      if (dm1[b]) n_dm1++;
    end
    busy_banks  = 0;
    mem_wanting = 0;
    for (int b = 0; b < BANKS; b++) begin
      if (!dut.b_req_ready[b]) busy_banks++;
      if (dut.b_mem_valid[b])  mem_wanting++;
    end
    if (busy_banks >= 2)  n_parallel++;
    if (mem_wanting >= 2) n_mem_contend++;
    if (resp_valid && !resp_ready) n_backpressure++;
  end

  // response side
  always @(posedge clk) if (rst_n) begin
    if (resp_valid && resp_ready) begin
      n_resp++;
      check(o_busy[resp_id], $sformatf("response for idle id %0d", resp_id));
      check(resp_hit == o_hit[resp_id], $sformatf("id %0d hit %0d exp %0d", resp_id, resp_hit, o_hit[resp_id]));
      check(resp_kind == (o_rd[resp_id] ? REQ_READ : REQ_WRITE), "response kind");
      if (o_rd[resp_id]) check(resp_rdata == o_data[resp_id], $sformatf("id %0d read data", resp_id));
      if (resp_hit) check(cyc - o_cyc[resp_id] >= HIT_LATENCY, "hit answered too early");
      o_busy[resp_id] = 0;
    end
    resp_ready <= ($urandom_range(0, 4) != 0);
  end

  initial begin
    int     bank, set, tg, ph, mode;
    bit     wr, wb, h;
    longint line, wbl;
    int     step;
    logic [7:0] id;
    ref_c = new(NSETS, WAYS);
    req_valid = 0; req_kind = REQ_READ; req_addr = '0; req_wdata = '0; req_id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    id = 0;
    for (int n = 0; n < NREQ; n++) begin
      ph   = n / 200;
      mode = ph % 3;
      bank = $urandom_range(0, BANKS - 1);
      set  = $urandom_range(0, 1);
      if (mode == 0) begin tg = $urandom_range(0, 26); wr = ($urandom_range(0, 99) < 35); end
      else if (mode == 1) begin   // write hits concentrated on one set
        tg = $urandom_range(0, 15) + ph; wr = (n % 40 != 39);
        if (n % 2 == 0) begin bank = ph % BANKS; set = 0; end
      end
      else begin tg = $urandom_range(0, 15) + ph; wr = 0; end
      line = (longint'(tg) * SETS_PER_BANK + set) * BANKS + bank;
      while (o_busy[id]) @(posedge clk);
      @(negedge clk);
      req_valid = 1; req_kind = wr ? REQ_WRITE : REQ_READ; req_addr = ADDR_W'(line << 6);
      req_id = id; req_wdata = {16{$urandom}} ^ {480'd0, 32'(n)};
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      // accepted at this edge: advance the reference
      h = ref_c.access(line, wr, wb, wbl, step);
      if (wb) exp_wb[bank].push_back(wbl);
      if (h) n_hit++; else begin n_miss++; step_seen[step]++; end
      o_hit[id] = h; o_rd[id] = !wr; o_data[id] = line_data(line); o_cyc[id] = cyc;
      o_busy[id] = 1;
      if (wr) latest[line] = req_wdata;
      #1 req_valid = 0;
      id = id + 1;
    end
    // drain
    for (int k = 0; k < 1000000; k++) begin
      bit any;
      any = 0;
      foreach (o_busy[i]) any |= o_busy[i];
      if (!any && !mem_req_valid) break;
      @(posedge clk);
    end
    repeat (400) @(posedge clk);
    check(n_resp == NREQ, $sformatf("%0d responses for %0d requests", n_resp, NREQ));
    for (int b = 0; b < BANKS; b++) check(exp_wb[b].size() == 0, "predicted write-back missing");
    $display("cycles %0d requests %0d hits %0d misses %0d PCM writes %0d (PCM model counted %0d)",
             cyc, NREQ, n_hit, n_miss, n_wb, u_pcm.writes);
    $display("demote 2->4 %0d  demote 1->3 %0d  parallel-bank cycles %0d  PCM contention cycles %0d  backpressure cycles %0d",
             n_dm2, n_dm1, n_parallel, n_mem_contend, n_backpressure);
    for (int s = 0; s < 5; s++) begin
      $display("victim step %0d: %0d", s, step_seen[s]);
      check(step_seen[s] > 0, $sformatf("victim step %0d never used", s));
    end
    check(n_hit > 0, "no hit");
    check(n_wb > 0, "no PCM write-back");
    check(n_dm2 > 0, "no level 2 -> 4 demotion");
    check(n_dm1 > 0, "no level 1 -> 3 demotion");
    check(n_parallel > 0, "banks never worked in parallel");
    check(n_mem_contend > 0, "PCM port never contended");
    check(n_backpressure > 0, "response never held off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
