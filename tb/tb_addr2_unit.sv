// tb_addr2_unit: for random current hits, every selected port-B block must
// point at channel CH+1 (clock 3) or CH-1 (clock 4) and at a time bin within
// one of the current bin; the three bins TM-1, TM, TM+1 must each be covered
// unless outside the map; Fig. 4's four cases are covered by construction.
`timescale 1ns/1ps
module tb_addr2_unit;
  import ce_pkg::*;
  logic clk = 0, rst = 1, ld = 0, en_up = 0, en_dn = 0;
  tm_t ld_tm = 0;
  ch_t ld_ch = 0;
  ram_addr_t b_addr [N_BLK];
  logic [3:0] sel_up, sel_dn;
  int checks = 0, failures = 0;
  int case_seen [4];

  addr2_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_dir(int bin, int ch, int dch, logic [3:0] sel);
    bit covered [3];
    int tch = ch + dch;
    covered = '{0, 0, 0};
    for (int k = 0; k < 4; k++) begin
      int abin = int'(b_addr[k][12:8]) * 4 + k;
      if (sel[k]) begin
        checks++;
        if (int'(b_addr[k][7:0]) != tch || abin < bin - 1 || abin > bin + 1) begin
          failures++;
          $display("FAIL bin %0d ch %0d dch %0d blk %0d -> bin %0d ch %0d", bin, ch, dch, k, abin, b_addr[k][7:0]);
        end else covered[abin - bin + 1] = 1;
      end
    end
    for (int d = -1; d <= 1; d++) begin
      bit in_map = (bin + d >= 0) && (bin + d <= 127) && (tch >= 0) && (tch <= 255);
      checks++;
      if (covered[d + 1] != in_map) begin
        failures++;
        $display("FAIL bin %0d ch %0d dch %0d: bin offset %0d covered=%0b", bin, ch, dch, d, covered[d + 1]);
      end
    end
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 2000; i++) begin
      int bin, ch;
      if (i < 8) begin
        bin = (i % 2) ? 127 : 0; ch = (i / 2 % 2) ? 255 : 0;
      end else begin
        bin = int'($urandom_range(127)); ch = int'($urandom_range(255));
      end
      case_seen[bin % 4]++;
      @(negedge clk);
      ld = 1; ld_tm = {7'(bin), 8'($urandom)}; ld_ch = 8'(ch);
      @(negedge clk);
      ld = 0; en_up = 1; #1;
      check_dir(bin, ch, 1, sel_up);
      @(negedge clk);
      en_up = 0; en_dn = 1; #1;
      check_dir(bin, ch, -1, sel_dn);
      @(negedge clk);
      en_dn = 0;
    end
    for (int c = 0; c < 4; c++) begin checks++; if (case_seen[c] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
