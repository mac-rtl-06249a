// tb_mac_write_traffic: PCM write traffic of the MAC L2 against an LRU cache
// of the same size, on a synthetic stream.
//
// The stream mixes, in every set it touches, a small group of lines that are
// repeatedly written back by the L1s (they stay dirty), a group of lines
// that are repeatedly read, and long bursts of read-once streaming lines.
// Between two reuses of a dirty line more than 16 distinct lines pass
// through its set, so plain LRU evicts (and writes back) the dirty lines,
// while MAC inserts the read-once lines at level 4 and evicts them first.
//
// Checks: every response against the reference MAC model (hit flag, data),
// the PCM write count against the MAC model, and that MAC writes less to PCM
// than the LRU model while keeping a hit count at least as high. The cache
// runs at its default size; the PCM latencies are shortened.
module tb_mac_write_traffic;
  import mac_pkg::*;
  import mac_ref_pkg::*;

  localparam int unsigned NSETS = BANKS * SETS_PER_BANK;

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

  pcm_model #(.ADDR_W(ADDR_W), .ID_W(3), .READ_LAT(16), .WRITE_LAT(32)) u_pcm (
    .clk(clk), .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_write(mem_req_write),
    .req_addr(mem_req_addr), .req_id(mem_req_id), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_id(mem_resp_id), .resp_rdata(mem_resp_rdata));

  int checks = 0, failures = 0;
  int mac_hits = 0, mac_wb = 0, lru_hits = 0, lru_wb = 0, n_resp = 0;
  mac_ref_cache ref_c;
  logic [511:0] latest [longint];
  bit           o_hit [256], o_rd [256], o_busy [256];
  logic [511:0] o_data [256];

  // LRU reference: per set, lines MRU first, with dirty bits
  longint lru_line  [NSETS][$];
  bit     lru_dirty [NSETS][$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic logic [511:0] line_data(longint l);
    return latest.exists(l) ? latest[l] : pcm_init_line(l);
  endfunction

  function automatic void lru_access(longint line, bit wr);
    int s;
    bit d;
    s = int'(line % NSETS);
    foreach (lru_line[s][i]) if (lru_line[s][i] == line) begin
      d = lru_dirty[s][i] | wr;
      lru_line[s].delete(i); lru_dirty[s].delete(i);
      lru_line[s].push_front(line); lru_dirty[s].push_front(d);
      lru_hits++;
      return;
    end
    if (lru_line[s].size() == WAYS) begin
      void'(lru_line[s].pop_back());
      if (lru_dirty[s].pop_back()) lru_wb++;
    end
    lru_line[s].push_front(line); lru_dirty[s].push_front(wr);
  endfunction

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (mem_req_valid && mem_req_ready && mem_req_write) mac_wb++;
    if (resp_valid && resp_ready) begin
      n_resp++;
      check(resp_hit == o_hit[resp_id], "hit flag");
      if (o_rd[resp_id]) check(resp_rdata == o_data[resp_id], "read data");
      o_busy[resp_id] = 0;
    end
    resp_ready <= 1'b1;
  end

  longint stream_next = 64'h1000;    // read-once lines come from here

  task automatic issue(longint line, bit wr, inout logic [7:0] id);
    bit h, wb;
    longint wbl;
    int step;
    while (o_busy[id]) @(posedge clk);
    @(negedge clk);
    req_valid = 1; req_kind = wr ? REQ_WRITE : REQ_READ; req_addr = ADDR_W'(line << 6);
    req_id = id; req_wdata = {16{$urandom}};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    h = ref_c.access(line, wr, wb, wbl, step);
    if (h) mac_hits++;
    lru_access(line, wr);
    o_hit[id] = h; o_rd[id] = !wr; o_data[id] = line_data(line); o_busy[id] = 1;
    if (wr) latest[line] = req_wdata;
    #1 req_valid = 0;
    id = id + 1;
  endtask

  initial begin
    logic [7:0] id;
    int nreq;
    ref_c = new(NSETS, WAYS);
    req_valid = 0; req_kind = REQ_READ; req_addr = '0; req_wdata = '0; req_id = '0;
    resp_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    id = 0; nreq = 0;
    // 16 sets (2 per bank), 60 rounds each
    for (int r = 0; r < 60; r++) begin
      for (int s = 0; s < 16; s++) begin
        longint base;
        base = longint'(s);                     // set index in the whole cache
        // dirty group: 6 lines written back
        for (int k = 0; k < 6; k++) begin issue(base + longint'(k) * NSETS, 1, id); nreq++; end
        // clean reused group: 4 lines read
        for (int k = 6; k < 10; k++) begin issue(base + longint'(k) * NSETS, 0, id); nreq++; end
        // read-once burst: 20 new lines in this set
        for (int k = 0; k < 20; k++) begin
          issue(base + (stream_next + longint'(k)) * NSETS, 0, id); nreq++;
        end
        stream_next += 20;
      end
    end
    for (int k = 0; k < 200000; k++) begin
      bit any;
      any = 0;
      foreach (o_busy[i]) any |= o_busy[i];
      if (!any && !mem_req_valid) break;
      @(posedge clk);
    end
    repeat (100) @(posedge clk);
    // lines still dirty in the cache at the end are not counted for either policy
    $display("requests %0d: MAC hits %0d PCM writes %0d | LRU hits %0d PCM writes %0d",
             nreq, mac_hits, mac_wb, lru_hits, lru_wb);
    check(n_resp == nreq, "responses missing");
    check(mac_wb == u_pcm.writes, "PCM write count");
    check(mac_wb < lru_wb, "MAC did not write less than LRU");
    check(mac_hits >= lru_hits, "MAC hit count below LRU");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
