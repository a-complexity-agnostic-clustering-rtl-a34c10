// tb_current_hit_valid_unit: random port-A words; the valid bit of the block
// TM[9:8] is taken on the enable and held otherwise.
`timescale 1ns/1ps
module tb_current_hit_valid_unit;
  import ce_pkg::*;
  logic clk = 0, rst = 1, en = 0, cur_valid;
  logic [1:0] blk = 0;
  hit_id_t a_rdata [N_BLK];
  bit exp_v;
  int checks = 0, failures = 0;

  current_hit_valid_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (a_rdata[k]) a_rdata[k] = '0;
    @(negedge clk); @(negedge clk); rst = 0;
    exp_v = 0;
    repeat (2000) begin
      @(negedge clk);
      en = 1'($urandom); blk = 2'($urandom);
      foreach (a_rdata[k]) a_rdata[k] = hit_id_t'($urandom);
      if (en) exp_v = a_rdata[blk][7];
      @(posedge clk); #1;
      checks++;
      if (cur_valid !== exp_v) begin failures++; $display("FAIL"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
