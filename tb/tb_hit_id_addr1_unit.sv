// tb_hit_id_addr1_unit: checks port-A address, write mask and data for the
// start-up clear, a fill write, and the read (clock 3) / clear (clock 4) of
// a captured current hit.
`timescale 1ns/1ps
module tb_hit_id_addr1_unit;
  import ce_pkg::*;
  logic clk = 0, rst = 1, init_we = 0, fill_we = 0, ld = 0, clr = 0;
  ram_addr_t init_addr = 0, a_addr;
  tm_t fill_tm = 0, ld_tm = 0;
  ch_t fill_ch = 0, ld_ch = 0;
  hitnum_t fill_hitnum = 0;
  logic [3:0] a_wmask;
  hit_id_t a_wdata;
  logic [1:0] cur_blk;
  int checks = 0, failures = 0;

  hit_id_addr1_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_port(logic [12:0] addr, logic [3:0] mask, logic [7:0] data, string what);
    checks++;
    if (a_addr !== addr || a_wmask !== mask || (mask != 0 && a_wdata !== data)) begin
      failures++;
      $display("FAIL %s: addr %h mask %b data %h, expected %h %b %h", what, a_addr, a_wmask, a_wdata, addr, mask, data);
    end
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    repeat (300) begin
      logic [14:0] tm;
      logic [7:0]  ch;
      logic [6:0]  n;
      tm = 15'($urandom); ch = 8'($urandom); n = 7'($urandom);
      // init clear
      @(negedge clk);
      init_we = 1; init_addr = 13'($urandom); #1;
      expect_port(init_addr, 4'hF, 8'h00, "init");
      // fill
      @(negedge clk);
      init_we = 0; fill_we = 1; fill_tm = tm; fill_ch = ch; fill_hitnum = n; #1;
      expect_port({tm[14:10], ch}, 4'b1 << tm[9:8], {1'b1, n}, "fill");
      // clock 2: capture
      @(negedge clk);
      fill_we = 0; ld = 1; ld_tm = tm; ld_ch = ch;
      @(negedge clk);
      ld = 0; ld_tm = ~tm; ld_ch = ~ch; #1;      // clock 3: read, no write
      expect_port({tm[14:10], ch}, 4'b0, 8'h00, "read");
      checks++;
      if (cur_blk !== tm[9:8]) failures++;
      @(negedge clk);
      clr = 1; #1;                              // clock 4: clear
      expect_port({tm[14:10], ch}, 4'b1 << tm[9:8], 8'h00, "clear");
      @(negedge clk);
      clr = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
