// tb_mac_state_array: checks the reset state of every set (way w at chain
// position w) and random writes and reads against a shadow copy.
module tb_mac_state_array;
  import mac_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0] rd_set, wr_set;
  set_state_t rd_state, wr_state;
  logic       wr_en;
  set_state_t shadow [64];

  mac_state_array dut (.*);

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
    wr_en = 0; wr_set = '0; rd_set = '0; wr_state = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 64; s++) begin
      rd_set = 6'(s); #1;
      for (int w = 0; w < WAYS; w++) check(int'(rd_state.pos[w]) == w, "reset chain order");
      shadow[s] = rd_state;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      wr_en  = $urandom_range(0, 1);
      wr_set = 6'($urandom);
      for (int k = 0; k < 4; k++) wr_state[k*32 +: 32] = $urandom;
      @(posedge clk); #1;
      if (wr_en) shadow[wr_set] = wr_state;
      wr_en  = 0;
      rd_set = 6'($urandom); #1;
      check(rd_state == shadow[rd_set], $sformatf("set %0d read back", rd_set));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
