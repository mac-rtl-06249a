// l2_bank: one bank of the shared write-back L2 cache with MAC replacement.
//
// The bank serves one request at a time. A request is a read (an L1
// load/store miss asking for a line) or a write (an L1 write-back of a whole
// 64-byte line). The address is a byte address; its line number is split,
// from the low end, into bank bits (used by the cache top to pick this bank),
// set index and tag.
//
// Sequence (states):
//   IDLE     req_ready = 1; the request is registered.
//   LOOKUP   tags, valid/dirty bits and the set's MAC state are read and
//            compared. mac_set_update computes the new replacement state,
//            which is written back at once together with the tag entry
//            (dirty = old dirty OR write, or for a miss: write).
//            Hit: the data line is read (read hit) or written (write hit).
//            Miss: the victim's line is read so it can be written back.
//   WB_REQ   the victim was dirty: a PCM write of its line is offered on the
//            memory port until accepted.
//   FILL_REQ read miss: a PCM read of the missing line is offered.
//   FILL     waits for the PCM read data and writes it into the victim way.
//   INSTALL  write miss: the written line is stored in the victim way; a
//            write-back carries the whole line, so nothing is fetched.
//   RESP     the response (id, hit flag, read data) is offered on the
//            response port until accepted.
// A hit is answered exactly HIT_LAT cycles after the request was accepted
// (the evaluated L2 has a 15-cycle hit latency); a miss takes as long as the
// PCM takes, and never less than HIT_LAT.
//
// Follows the paper: 16 ways, write-back, 64-byte lines, the MAC insertion,
// promotion and victim rules (in mac_set_update). This design's own choices:
// the blocking one-request-at-a-time controller, the state sequence above,
// writing no-fetch on a write miss, the bank/set/tag split of the address,
// and the valid/ready handshakes on all ports.
module l2_bank
  import mac_pkg::*;
#(
  parameter int unsigned SETS      = SETS_PER_BANK,
  parameter int unsigned BANK_BITS = $clog2(BANKS),
  parameter int unsigned HIT_LAT   = HIT_LATENCY,
  parameter int unsigned ID_W      = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // request from the L1 side
  input  logic                  req_valid,
  output logic                  req_ready,
  input  req_kind_e             req_kind,
  input  logic [ADDR_W-1:0]     req_addr,
  input  logic [ID_W-1:0]       req_id,
  input  logic [LINE_BITS-1:0]  req_wdata,
  // response to the L1 side
  output logic                  resp_valid,
  input  logic                  resp_ready,
  output req_kind_e             resp_kind,
  output logic [ID_W-1:0]       resp_id,
  output logic                  resp_hit,
  output logic [LINE_BITS-1:0]  resp_rdata,
  // PCM side
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_write,
  output logic [ADDR_W-1:0]     mem_req_addr,
  output logic [LINE_BITS-1:0]  mem_req_wdata,
  input  logic                  mem_resp_valid,
  input  logic [LINE_BITS-1:0]  mem_resp_rdata,
  // one pulse per miss, with the victim step that served it
  output logic                  miss_evt,
  output vstep_e                miss_step,
  output logic                  miss_demote_l2,
  output logic                  miss_demote_l1
);

  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned TAG_W = ADDR_W - OFF_W - BANK_BITS - SET_W;
  localparam int unsigned CNT_W = $clog2(HIT_LAT + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_WB_REQ, S_FILL_REQ, S_FILL, S_INSTALL, S_RESP
  } state_e;

  state_e                 st;
  req_kind_e              r_kind;
  logic [ADDR_W-1:0]      r_addr;
  logic [ID_W-1:0]        r_id;
  logic [LINE_BITS-1:0]   r_wdata;
  logic                   r_hit;
  logic [WAY_W-1:0]       r_way;
  logic [TAG_W-1:0]       r_vtag;
  logic                   r_load_rd;
  logic [LINE_BITS-1:0]   r_rdata;
  logic [CNT_W-1:0]       cnt;

  logic [SET_W-1:0]       set_idx;
  logic [TAG_W-1:0]       tag;
  assign set_idx = r_addr[OFF_W + BANK_BITS +: SET_W];
  assign tag     = r_addr[ADDR_W-1 -: TAG_W];

  // ---- arrays -------------------------------------------------------------
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim, upd_way;
  logic [WAYS-1:0]  valid_unused;
  vstep_e           step;
  logic             dm2, dm1;
  logic [WAYS-1:0][TAG_W-1:0] t_tag;
  logic [WAYS-1:0]            t_valid, t_dirty;
  logic                       t_we, t_wdirty;
  set_state_t                 s_rd, s_wr;
  logic                       s_we;
  logic                       d_en, d_we;
  logic [WAY_W-1:0]           d_way;
  logic [LINE_BITS-1:0]       d_wline, d_rline;

  l2_tag_array #(.SETS(SETS), .TAG_W(TAG_W)) u_tags (
    .clk(clk), .rst_n(rst_n), .rd_set(set_idx), .rd_tag(t_tag), .rd_valid(t_valid),
    .rd_dirty(t_dirty), .wr_en(t_we), .wr_set(set_idx), .wr_way(upd_way),
    .wr_tag(tag), .wr_dirty(t_wdirty));

  mac_state_array #(.SETS(SETS)) u_state (
    .clk(clk), .rst_n(rst_n), .rd_set(set_idx), .rd_state(s_rd),
    .wr_en(s_we), .wr_set(set_idx), .wr_state(s_wr));

  l2_data_array #(.SETS(SETS)) u_data (
    .clk(clk), .en(d_en), .we(d_we), .set(set_idx), .way(d_way),
    .wr_line(d_wline), .rd_line(d_rline));

  // ---- lookup and replacement --------------------------------------------

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (t_valid[w] && t_tag[w] == tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
  end

  mac_set_update u_upd (
    .state_in(s_rd), .valid_in(t_valid), .hit(hit), .hit_way(hit_way), .kind(r_kind),
    .state_out(s_wr), .valid_out(valid_unused), .victim(victim), .step(step),
    .demote_l2(dm2), .demote_l1(dm1));

  assign upd_way  = hit ? hit_way : victim;
  assign s_we     = (st == S_LOOKUP);
  assign t_we     = (st == S_LOOKUP);
  assign t_wdirty = (r_kind == REQ_WRITE) || (hit && t_dirty[hit_way]);

  assign miss_evt       = (st == S_LOOKUP) && !hit;
  assign miss_step      = step;
  assign miss_demote_l2 = dm2;
  assign miss_demote_l1 = dm1;

  // data array port
  always_comb begin
    d_en    = 1'b0;
    d_we    = 1'b0;
    d_way   = r_way;
    d_wline = r_wdata;
    unique case (st)
      S_LOOKUP: begin
        d_en  = 1'b1;
        d_way = upd_way;
        d_we  = hit && (r_kind == REQ_WRITE);
      end
      S_FILL: begin
        d_en    = mem_resp_valid;
        d_we    = 1'b1;
        d_wline = mem_resp_rdata;
      end
      S_INSTALL: begin
        d_en = 1'b1;
        d_we = 1'b1;
      end
      default: ;
    endcase
  end

  // ---- control ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      r_kind    <= REQ_READ;
      r_addr    <= '0;
      r_id      <= '0;
      r_wdata   <= '0;
      r_hit     <= 1'b0;
      r_way     <= '0;
      r_vtag    <= '0;
      r_load_rd <= 1'b0;
      r_rdata   <= '0;
      cnt       <= '0;
    end else begin
      if (cnt < CNT_W'(HIT_LAT)) cnt <= cnt + 1'b1;
      r_load_rd <= 1'b0;
      if (r_load_rd) r_rdata <= d_rline;
      unique case (st)
        S_IDLE: if (req_valid) begin
          r_kind  <= req_kind;
          r_addr  <= req_addr;
          r_id    <= req_id;
          r_wdata <= req_wdata;
          cnt     <= CNT_W'(1);
          st      <= S_LOOKUP;
        end
        S_LOOKUP: begin
          r_hit  <= hit;
          r_way  <= upd_way;
          r_vtag <= t_tag[victim];
          if (hit) begin
            r_load_rd <= (r_kind == REQ_READ);
            st        <= S_RESP;
          end else if (t_valid[victim] && t_dirty[victim]) begin
            st <= S_WB_REQ;
          end else begin
            st <= (r_kind == REQ_WRITE) ? S_INSTALL : S_FILL_REQ;
          end
        end
        S_WB_REQ: if (mem_req_ready)
          st <= (r_kind == REQ_WRITE) ? S_INSTALL : S_FILL_REQ;
        S_FILL_REQ: if (mem_req_ready) st <= S_FILL;
        S_FILL: if (mem_resp_valid) begin
          r_rdata <= mem_resp_rdata;
          st      <= S_RESP;
        end
        S_INSTALL: st <= S_RESP;
        S_RESP: if (resp_valid && resp_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign req_ready     = (st == S_IDLE);
  assign resp_valid    = (st == S_RESP) && (cnt >= CNT_W'(HIT_LAT));
  assign resp_kind     = r_kind;
  assign resp_id       = r_id;
  assign resp_hit      = r_hit;
  assign resp_rdata    = r_rdata;

  assign mem_req_valid = (st == S_WB_REQ) || (st == S_FILL_REQ);
  assign mem_req_write = (st == S_WB_REQ);
  assign mem_req_addr  = (st == S_WB_REQ)
                         ? {r_vtag, set_idx, r_addr[OFF_W +: BANK_BITS], OFF_W'(0)}
                         : {r_addr[ADDR_W-1:OFF_W], OFF_W'(0)};
  assign mem_req_wdata = d_rline;

  // ---- rules --------------------------------------------------------------
  // A valid line's dirty bit and the DL part of its FDL always agree.
  logic [WAYS-1:0] fdl_dirty;
  always_comb
    for (int w = 0; w < WAYS; w++) fdl_dirty[w] = fdl_is_dirty(s_rd.fdl[w]);

  a_dirty_matches_fdl: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_LOOKUP) |-> ((t_valid & (t_dirty ^ fdl_dirty)) == '0));
  // MAC's guarantee: while a full set holds a stale clean (level 4) line, the
  // victim is clean, so no PCM write happens; step b evicts a dirty line.
  a_clean_first: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_LOOKUP && !hit && step == VS_A) |-> !t_dirty[victim]);
  a_step_b_dirty: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_LOOKUP && !hit && step == VS_B) |-> t_dirty[victim]);
  // A memory request is held, unchanged, until it is accepted.
  a_mem_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=>
      (mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_write)));
  // A response, once offered, stays offered until taken.
  a_resp_held: assert property (@(posedge clk) disable iff (!rst_n)
    (resp_valid && !resp_ready) |=> resp_valid);

endmodule
