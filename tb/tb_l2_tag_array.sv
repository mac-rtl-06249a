// tb_l2_tag_array: after reset no way is valid or dirty; random writes of
// single ways are then checked, with all ways of a set read at once, against
// a shadow copy.
module tb_l2_tag_array;
  import mac_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0]              rd_set, wr_set;
  logic [WAYS-1:0][17:0]   rd_tag;
  logic [WAYS-1:0]         rd_valid, rd_dirty;
  logic                    wr_en, wr_dirty;
  logic [WAY_W-1:0]        wr_way;
  logic [17:0]             wr_tag;

  logic [17:0] s_tag [64][WAYS];
  bit          s_vld [64][WAYS];
  bit          s_drt [64][WAYS];

  l2_tag_array dut (.*);

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
    wr_en = 0; wr_set = '0; rd_set = '0; wr_way = '0; wr_tag = '0; wr_dirty = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 64; s++) begin
      rd_set = 6'(s); #1;
      check(rd_valid == '0 && rd_dirty == '0, "reset valid/dirty");
      for (int w = 0; w < WAYS; w++) begin s_vld[s][w] = 0; s_drt[s][w] = 0; end
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      wr_en = ($urandom_range(0, 3) != 0);
      wr_set = 6'($urandom_range(0, 7)); wr_way = WAY_W'($urandom);
      wr_tag = 18'($urandom); wr_dirty = $urandom_range(0, 1);
      @(posedge clk); #1;
      if (wr_en) begin
        s_tag[wr_set][wr_way] = wr_tag; s_vld[wr_set][wr_way] = 1; s_drt[wr_set][wr_way] = wr_dirty;
      end
      wr_en = 0;
      rd_set = 6'($urandom_range(0, 7)); #1;
      for (int w = 0; w < WAYS; w++) begin
        check(rd_valid[w] == s_vld[rd_set][w], "valid");
        if (s_vld[rd_set][w]) begin
          check(rd_dirty[w] == s_drt[rd_set][w], "dirty");
          check(rd_tag[w] == s_tag[rd_set][w], "tag");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
