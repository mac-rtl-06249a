// pcm_model: behavioural model of the PCM main memory behind the L2 (not
// synthesizable, testbench only).
//
// Serves one request at a time. A read returns the line's data READ_LAT
// cycles after it was accepted; a write occupies the memory for WRITE_LAT
// cycles. The defaults are the evaluated system's PCM latencies (1024 and
// 4096 cycles). Lines are stored in an associative array; a line never
// written reads as pcm_init_line(line). The id given with a read comes back
// with its data. Writes are counted.
module pcm_model
  import mac_ref_pkg::*;
#(
  parameter int unsigned ADDR_W    = 33,
  parameter int unsigned ID_W      = 3,
  parameter int unsigned READ_LAT  = 1024,
  parameter int unsigned WRITE_LAT = 4096
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [ID_W-1:0]   req_id,
  input  logic [511:0]      req_wdata,
  output logic              resp_valid,
  output logic [ID_W-1:0]   resp_id,
  output logic [511:0]      resp_rdata
);

  logic [511:0] mem [longint];
  int unsigned  busy = 0;
  int unsigned  writes = 0, reads = 0;
  bit           rd_pending = 0;
  longint       rd_line;
  logic [ID_W-1:0] rd_id;

  assign req_ready = (busy == 0);

  initial begin
    resp_valid = 0; resp_id = '0; resp_rdata = '0;
  end

  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (busy > 0) begin
      busy <= busy - 1;
      if (busy == 1 && rd_pending) begin
        rd_pending <= 0;
        resp_valid <= 1'b1;
        resp_id    <= rd_id;
        resp_rdata <= mem.exists(rd_line) ? mem[rd_line] : pcm_init_line(rd_line);
      end
    end else if (req_valid) begin
      if (req_write) begin
        mem[longint'(req_addr >> 6)] = req_wdata;
        writes++;
        busy <= WRITE_LAT;
      end else begin
        reads++;
        rd_pending <= 1;
        rd_line    <= longint'(req_addr >> 6);
        rd_id      <= req_id;
        busy       <= READ_LAT;
      end
    end
  end

endmodule
