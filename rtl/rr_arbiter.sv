// rr_arbiter: round-robin choice of one of N requesters.
//
// The first requester at or after the priority pointer wins. When the grant
// is taken (accept high), the pointer moves to the requester after the
// winner, so every requester is served within N grants. A grant that is not
// taken is held in the next cycle (the requesters keep their requests up
// until served), so a granted request never changes before it is accepted.
// Used by the L2 top to share the response port and the PCM port among the
// banks; the paper does not describe this sharing.
module rr_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 accept,
  output logic                 gnt_valid,
  output logic [$clog2(N)-1:0] gnt_idx
);

  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] ptr, held, pick;
  logic          lock, pick_valid;

  always_comb begin
    pick_valid = 1'b0;
    pick       = '0;
    for (int k = N - 1; k >= 0; k--) begin
      logic [IW:0] i;
      i = {1'b0, ptr} + (IW + 1)'(k);
      if (i >= (IW + 1)'(N)) i = i - (IW + 1)'(N);
      if (req[i[IW-1:0]]) begin
        pick_valid = 1'b1;
        pick       = i[IW-1:0];
      end
    end
  end

  assign gnt_valid = lock ? req[held] : pick_valid;
  assign gnt_idx   = lock ? held : pick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr  <= '0;
      lock <= 1'b0;
      held <= '0;
    end else begin
      lock <= gnt_valid && !accept;
      held <= gnt_idx;
      if (gnt_valid && accept)
        ptr <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + 1'b1;
    end
  end

endmodule
