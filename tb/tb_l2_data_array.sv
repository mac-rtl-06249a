// tb_l2_data_array: random line writes and reads; a read's data must appear
// in the cycle after the request and equal the last line written there.
module tb_l2_data_array;
  import mac_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 en, we;
  logic [5:0]           set;
  logic [WAY_W-1:0]     way;
  logic [LINE_BITS-1:0] wr_line, rd_line;
  logic [LINE_BITS-1:0] shadow [1024];
  bit                   written [1024];

  l2_data_array dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int idx;
    logic [LINE_BITS-1:0] held;
    en = 0; we = 0; set = '0; way = '0; wr_line = '0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      en  = 1;
      we  = ($urandom_range(0, 1) == 1);
      set = 6'($urandom_range(0, 3)); way = WAY_W'($urandom);
      for (int k = 0; k < 16; k++) wr_line[k*32 +: 32] = $urandom;
      idx = {set, way};
      @(posedge clk); #1;
      // a read, and a write too (read-before-write), returns the old line
      if (written[idx]) check(rd_line == shadow[idx], $sformatf("line %0d", idx));
      if (we) begin shadow[idx] = wr_line; written[idx] = 1; end
      held = rd_line;
      en = 0; we = 0;
      // a disabled cycle must leave the output alone
      @(posedge clk); #1;
      check(rd_line == held, "output held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
