// l2_data_array: line data of one L2 bank, 64-byte lines, SETS x WAYS lines.
//
// A single-port memory with a synchronous read: the line at (set, way) given
// in one cycle appears on rd_line in the next. A write stores a whole line.
// Read and write share the address; a write cycle returns the old line.
// Only the line size and capacity come from the evaluated configuration; the
// port shape is this design's choice.
module l2_data_array
  import mac_pkg::*;
#(
  parameter int unsigned SETS = SETS_PER_BANK
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic                    we,
  input  logic [$clog2(SETS)-1:0] set,
  input  logic [WAY_W-1:0]        way,
  input  logic [LINE_BITS-1:0]    wr_line,
  output logic [LINE_BITS-1:0]    rd_line
);

  logic [LINE_BITS-1:0] mem [SETS * WAYS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[{set, way}] <= wr_line;
      rd_line <= mem[{set, way}];
    end
  end

endmodule
