// mac_l2_cache: shared, banked, write-back L2 cache whose replacement policy
// is MAC, placed between the L1 caches and a PCM main memory.
//
// Eight l2_bank instances (64 sets x 16 ways x 64-byte lines each, 512 KB in
// all) are interleaved on the lowest line-address bits: a request goes to
// bank addr[6 +: 3] and is accepted when that bank is idle, so requests to
// different banks proceed in parallel. Banks answer on one shared response
// port and share one PCM port; each is given to one bank at a time by a
// round-robin arbiter. Every PCM request carries the bank number as its id,
// and the PCM returns read data with that id so it reaches the right bank.
// PCM writes (dirty-victim write-backs) are the traffic MAC aims to reduce.
//
// Request and response ports use valid/ready handshakes; a response is held
// until taken. Per-bank miss events report which victim step served each
// miss and whether it demoted blocks.
//
// From the paper: cache size, associativity, line size, bank count, hit
// latency, write-back policy and the MAC rules. This design's own choices:
// the bank interleaving, the single request port (the crossbar in front of
// the L2 is not part of this design), round-robin sharing of the response
// and PCM ports, and the id-tagged PCM interface.
module mac_l2_cache
  import mac_pkg::*;
#(
  parameter int unsigned NBANKS  = BANKS,
  parameter int unsigned SETS    = SETS_PER_BANK,
  parameter int unsigned HIT_LAT = HIT_LATENCY,
  parameter int unsigned ID_W    = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req_valid,
  output logic                        req_ready,
  input  req_kind_e                   req_kind,
  input  logic [ADDR_W-1:0]           req_addr,
  input  logic [ID_W-1:0]             req_id,
  input  logic [LINE_BITS-1:0]        req_wdata,
  output logic                        resp_valid,
  input  logic                        resp_ready,
  output req_kind_e                   resp_kind,
  output logic [ID_W-1:0]             resp_id,
  output logic                        resp_hit,
  output logic [LINE_BITS-1:0]        resp_rdata,
  output logic                        mem_req_valid,
  input  logic                        mem_req_ready,
  output logic                        mem_req_write,
  output logic [ADDR_W-1:0]           mem_req_addr,
  output logic [$clog2(NBANKS)-1:0]   mem_req_id,
  output logic [LINE_BITS-1:0]        mem_req_wdata,
  input  logic                        mem_resp_valid,
  input  logic [$clog2(NBANKS)-1:0]   mem_resp_id,
  input  logic [LINE_BITS-1:0]        mem_resp_rdata,
  output logic [NBANKS-1:0]           miss_evt,
  output vstep_e [NBANKS-1:0]         miss_step,
  output logic [NBANKS-1:0]           miss_demote_l2,
  output logic [NBANKS-1:0]           miss_demote_l1
);

  localparam int unsigned BB    = $clog2(NBANKS);
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);

  logic [BB-1:0] sel;
  assign sel = req_addr[OFF_W +: BB];

  logic [NBANKS-1:0]                b_req_ready, b_resp_valid, b_resp_ready, b_resp_hit;
  req_kind_e [NBANKS-1:0]           b_resp_kind;
  logic [NBANKS-1:0][ID_W-1:0]      b_resp_id;
  logic [NBANKS-1:0][LINE_BITS-1:0] b_resp_rdata, b_mem_wdata;
  logic [NBANKS-1:0]                b_mem_valid, b_mem_ready, b_mem_write, b_mem_resp_valid;
  logic [NBANKS-1:0][ADDR_W-1:0]    b_mem_addr;

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    l2_bank #(.SETS(SETS), .BANK_BITS(BB), .HIT_LAT(HIT_LAT), .ID_W(ID_W)) u_bank (
      .clk(clk), .rst_n(rst_n),
      .req_valid(req_valid && sel == BB'(b)), .req_ready(b_req_ready[b]),
      .req_kind(req_kind), .req_addr(req_addr), .req_id(req_id), .req_wdata(req_wdata),
      .resp_valid(b_resp_valid[b]), .resp_ready(b_resp_ready[b]), .resp_kind(b_resp_kind[b]),
      .resp_id(b_resp_id[b]), .resp_hit(b_resp_hit[b]), .resp_rdata(b_resp_rdata[b]),
      .mem_req_valid(b_mem_valid[b]), .mem_req_ready(b_mem_ready[b]),
      .mem_req_write(b_mem_write[b]), .mem_req_addr(b_mem_addr[b]),
      .mem_req_wdata(b_mem_wdata[b]),
      .mem_resp_valid(b_mem_resp_valid[b]), .mem_resp_rdata(mem_resp_rdata),
      .miss_evt(miss_evt[b]), .miss_step(miss_step[b]),
      .miss_demote_l2(miss_demote_l2[b]), .miss_demote_l1(miss_demote_l1[b]));
    assign b_mem_resp_valid[b] = mem_resp_valid && (mem_resp_id == BB'(b));
  end

  assign req_ready = b_req_ready[sel];

  // ---- response port ------------------------------------------------------
  logic          r_gv;
  logic [BB-1:0] r_g;
  rr_arbiter #(.N(NBANKS)) u_resp_arb (
    .clk(clk), .rst_n(rst_n), .req(b_resp_valid), .accept(resp_ready),
    .gnt_valid(r_gv), .gnt_idx(r_g));

  assign resp_valid   = r_gv;
  assign resp_kind    = b_resp_kind[r_g];
  assign resp_id      = b_resp_id[r_g];
  assign resp_hit     = b_resp_hit[r_g];
  assign resp_rdata   = b_resp_rdata[r_g];
  always_comb begin
    b_resp_ready       = '0;
    b_resp_ready[r_g]  = r_gv && resp_ready;
  end

  // ---- PCM port -----------------------------------------------------------
  logic          m_gv;
  logic [BB-1:0] m_sel;
  rr_arbiter #(.N(NBANKS)) u_mem_arb (
    .clk(clk), .rst_n(rst_n), .req(b_mem_valid), .accept(mem_req_ready),
    .gnt_valid(m_gv), .gnt_idx(m_sel));

  assign mem_req_valid = m_gv;
  assign mem_req_write = b_mem_write[m_sel];
  assign mem_req_addr  = b_mem_addr[m_sel];
  assign mem_req_wdata = b_mem_wdata[m_sel];
  assign mem_req_id    = m_sel;
  always_comb begin
    b_mem_ready        = '0;
    b_mem_ready[m_sel] = mem_req_valid && mem_req_ready;
  end

  a_mem_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=>
      (mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_id)));
  a_resp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (resp_valid && !resp_ready) |=> (resp_valid && $stable(resp_id)));

endmodule
