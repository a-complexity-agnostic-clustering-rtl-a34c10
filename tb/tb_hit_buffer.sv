// tb_hit_buffer: fills all 1024 words with random data, then reads them back
// in random order while writing elsewhere, checking the two-clock read latency.
`timescale 1ns/1ps
module tb_hit_buffer;
  logic clk = 0, we = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [47:0] wdata = 0, rdata;
  logic [47:0] ref_mem [1024];
  int addr_hist [$];
  int checks = 0, failures = 0;

  hit_buffer #(.DEPTH(1024), .WIDTH(48)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = {$urandom, 16'($urandom)};
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      raddr = 10'($urandom);
      addr_hist.push_back(int'(raddr));
      // write only to addresses not read in the last few clocks
      we = 1'($urandom);
      waddr = 10'($urandom);
      for (int k = 0; k < 3 && k <= t; k++) if (int'(waddr) == addr_hist[t - k]) we = 0;
      wdata = {$urandom, 16'($urandom)};
      #1;
      if (t >= 2) begin
        checks++;
        if (rdata !== ref_mem[addr_hist[t - 2]]) begin
          failures++;
          $display("FAIL addr %0d got %h exp %h", addr_hist[t - 2], rdata, ref_mem[addr_hist[t - 2]]);
        end
      end
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
