// tb_l2_bank: one L2 bank against the reference MAC cache and a PCM model.
//
// Random reads and line write-backs go to a few sets, in phases that drive
// every victim step: a mixed phase, a phase of write hits on a small group
// of lines (all blocks become level 1, so the next miss uses step d), and a
// phase of read hits (all clean-fresh, step c). For every request the
// testbench checks the hit flag, the returned line (against a model of the
// latest data of every line), the exact 15-cycle hit latency, and every PCM
// write (address and data must be those of the victim the reference model
// predicts). The PCM latencies are shortened to keep the run short.
module tb_l2_bank;
  import mac_pkg::*;
  import mac_ref_pkg::*;

  localparam int unsigned SET_W = $clog2(SETS_PER_BANK);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid, resp_ready, resp_hit;
  req_kind_e req_kind, resp_kind;
  logic [ADDR_W-1:0] req_addr;
  logic [7:0] req_id, resp_id;
  logic [LINE_BITS-1:0] req_wdata, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [LINE_BITS-1:0] mem_req_wdata, mem_resp_rdata;
  logic [0:0] mem_resp_id;
  logic miss_evt, dm2, dm1;
  vstep_e miss_step;

  l2_bank dut (.*, .miss_step(miss_step), .miss_demote_l2(dm2), .miss_demote_l1(dm1));

  pcm_model #(.ADDR_W(ADDR_W), .ID_W(1), .READ_LAT(20), .WRITE_LAT(60)) u_pcm (
    .clk(clk), .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_write(mem_req_write),
    .req_addr(mem_req_addr), .req_id(1'b0), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_id(mem_resp_id), .resp_rdata(mem_resp_rdata));

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_dm2 = 0, n_dm1 = 0;
  int step_seen [5];
  mac_ref_cache ref_c;
  logic [511:0] latest [longint];
  longint exp_wb [$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, what); end
  endtask

  function automatic logic [511:0] line_data(longint l);
    return latest.exists(l) ? latest[l] : pcm_init_line(l);
  endfunction

  // PCM write monitor
  always @(posedge clk) if (rst_n && mem_req_valid && mem_req_ready && mem_req_write) begin
    longint l;
    l = longint'(mem_req_addr >> 6);
    n_wb++;
    check(exp_wb.size() > 0, "unexpected PCM write");
    if (exp_wb.size() > 0) begin
      check(l == exp_wb[0], $sformatf("PCM write line %0h exp %0h", l, exp_wb[0]));
      void'(exp_wb.pop_front());
    end
    check(mem_req_wdata == line_data(l), "PCM write data");
  end

  always @(posedge clk) if (rst_n && miss_evt) begin
    if (dm2) n_dm2++;
    if (dm1) n_dm1++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_req(int set, int t, bit wr);
    longint line, refline, wbl;
    bit     exp_hit, wb;
    int     step, lat;
    logic [511:0] wd;
    line    = (longint'(t) << (SET_W + 3)) | (longint'(set) << 3);  // bank bits 0
    refline = line >> 3;
    wd      = {16{$urandom}} ^ {$urandom, 480'd0};
    exp_hit = ref_c.access(refline, wr, wb, wbl, step);
    if (wb) exp_wb.push_back(wbl << 3);
    if (exp_hit) n_hit++;
    else begin n_miss++; step_seen[step]++; end
    @(negedge clk);
    req_valid = 1; req_kind = wr ? REQ_WRITE : REQ_READ; req_addr = ADDR_W'(line << 6);
    req_wdata = wd; req_id = 8'($urandom);
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1; req_valid = 0;
    lat = 0;
    resp_ready = ($urandom_range(0, 3) != 0);
    while (!(resp_valid && resp_ready)) begin
      @(posedge clk); #1; lat++;
      if (!resp_ready) resp_ready = ($urandom_range(0, 1) == 0);
    end
    check(resp_hit == exp_hit, $sformatf("hit flag %0d exp %0d line %0h", resp_hit, exp_hit, line));
    check(resp_id == req_id, "resp id");
    check(resp_kind == req_kind, "resp kind");
    if (!wr) check(resp_rdata == line_data(line), $sformatf("read data line %0h", line));
    if (wr) latest[line] = wd;
    @(posedge clk); #1;
    resp_ready = 0;
  endtask

  // hit latency: measured separately with resp_ready held high
  int lat_checks = 0;
  int acc_cycle, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (req_valid && req_ready) acc_cycle = cyc;
  always @(posedge clk) if (resp_valid && resp_hit && $rose(resp_valid)) begin
    check(cyc - acc_cycle == HIT_LATENCY, $sformatf("hit latency %0d", cyc - acc_cycle));
    lat_checks++;
  end

  initial begin
    ref_c = new(SETS_PER_BANK, WAYS);
    req_valid = 0; resp_ready = 0; req_kind = REQ_READ; req_addr = '0; req_wdata = '0; req_id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 30; ph++) begin
      int mode;
      mode = ph % 3;
      for (int n = 0; n < 200; n++) begin
        int s;
        s = $urandom_range(0, 2);
        if (mode == 0) do_req(s, $urandom_range(0, 26), $urandom_range(0, 99) < 35);
        else if (mode == 1) do_req(s, $urandom_range(0, 15) + ph, n % 40 == 39 ? 0 : 1);
        else do_req(s, $urandom_range(0, 15) + ph, 0);
      end
    end
    repeat (100) @(posedge clk);
    check(exp_wb.size() == 0, "write-backs predicted but never seen");
    $display("hits %0d misses %0d pcm writes %0d demote2 %0d demote1 %0d latency checks %0d",
             n_hit, n_miss, n_wb, n_dm2, n_dm1, lat_checks);
    for (int s = 0; s < 5; s++) begin
      $display("victim step %0d: %0d", s, step_seen[s]);
      check(step_seen[s] > 0, $sformatf("victim step %0d never used", s));
    end
    check(n_wb > 0 && n_dm2 > 0 && n_dm1 > 0 && lat_checks > 0, "mechanism never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
