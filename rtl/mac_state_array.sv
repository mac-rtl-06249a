// mac_state_array: replacement state store of one L2 bank.
//
// One set_state_t per set: a 4-bit global-LRU-chain position and a 2-bit
// FDL per way, plus four 4-bit level-LRU registers (per 16-way set this is
// the storage counted in the paper's overhead estimate). It is held in
// flip-flops so that reset can put every set into its initial chain order
// (way w at position w) in one cycle; the paper does not describe reset.
// Read is combinational (the bank reads it in the cycle after the set index
// is registered); a write takes effect at the next clock edge.
module mac_state_array
  import mac_pkg::*;
#(
  parameter int unsigned SETS = SETS_PER_BANK
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(SETS)-1:0] rd_set,
  output set_state_t              rd_state,
  input  logic                    wr_en,
  input  logic [$clog2(SETS)-1:0] wr_set,
  input  set_state_t              wr_state
);

  set_state_t mem [SETS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) mem[s] <= set_state_reset();
    end else if (wr_en) begin
      mem[wr_set] <= wr_state;
    end
  end

  assign rd_state = mem[rd_set];

endmodule
