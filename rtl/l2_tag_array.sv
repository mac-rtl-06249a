// l2_tag_array: tag, valid and dirty bits of one L2 bank.
//
// Tags are kept in a plain memory (no reset needed); valid and dirty bits are
// flip-flops cleared by reset. A read returns all ways of one set in the
// same cycle (combinational read); a write updates one way of one set at the
// next clock edge. The organisation (16 ways, write-back with a dirty bit per
// line) is that of the evaluated L2; the port arrangement is this design's.
module l2_tag_array
  import mac_pkg::*;
#(
  parameter int unsigned SETS  = SETS_PER_BANK,
  parameter int unsigned TAG_W = 18
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(SETS)-1:0]    rd_set,
  output logic [WAYS-1:0][TAG_W-1:0] rd_tag,
  output logic [WAYS-1:0]            rd_valid,
  output logic [WAYS-1:0]            rd_dirty,
  input  logic                       wr_en,
  input  logic [$clog2(SETS)-1:0]    wr_set,
  input  logic [WAY_W-1:0]           wr_way,
  input  logic [TAG_W-1:0]           wr_tag,
  input  logic                       wr_dirty
);

  logic [WAYS-1:0][TAG_W-1:0] tags  [SETS];
  logic [WAYS-1:0]            valid [SETS];
  logic [WAYS-1:0]            dirty [SETS];

  always_ff @(posedge clk) begin
    if (wr_en) tags[wr_set][wr_way] <= wr_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
      end
    end else if (wr_en) begin
      valid[wr_set][wr_way] <= 1'b1;
      dirty[wr_set][wr_way] <= wr_dirty;
    end
  end

  assign rd_tag   = tags[rd_set];
  assign rd_valid = valid[rd_set];
  assign rd_dirty = dirty[rd_set];

endmodule
