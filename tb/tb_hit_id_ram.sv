// tb_hit_id_ram: random port-A writes with per-block masks; port A and the
// four independent port-B addresses are read back with two clocks of latency
// and compared with a model memory per block.
`timescale 1ns/1ps
module tb_hit_id_ram;
  logic clk = 0;
  logic [12:0] a_addr = 0;
  logic [3:0]  a_wmask = 0;
  logic [7:0]  a_wdata = 0;
  logic [7:0]  a_rdata [4];
  logic [12:0] b_addr [4];
  logic [7:0]  b_rdata [4];
  logic [7:0]  ref_mem [4][8192];
  int checks = 0, failures = 0;
  int ha [$];
  int hb [$][4];

  hit_id_ram #(.ADDR_W(13), .DATA_W(8), .N_BLK(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (b_addr[k]) b_addr[k] = 0;
    // fill a 64-address window of every block
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      a_addr = 13'(a * 97); a_wmask = 4'hF; a_wdata = 8'($urandom);
      for (int k = 0; k < 4; k++) ref_mem[k][a * 97] = a_wdata;
    end
    @(negedge clk); a_wmask = 0;
    for (int t = 0; t < 4000; t++) begin
      int bb [4];
      @(negedge clk);
      a_addr = 13'(97 * $urandom_range(63));
      foreach (b_addr[k]) begin
        b_addr[k] = 13'(97 * $urandom_range(63));
        bb[k] = int'(b_addr[k]);
      end
      // every 4th clock port A writes instead of being checked; it never
      // writes an address that a read still in flight was given
      a_wmask = 0;
      if (t % 4 == 0 && t > 0) begin
        a_wmask = 4'($urandom);
        a_wdata = 8'($urandom);
        for (int k = 0; k < 4; k++) begin
          if (int'(a_addr) == bb[k] || int'(a_addr) == hb[t - 1][k]) a_wmask = 0;
        end
        if (int'(a_addr) == ha[t - 1]) a_wmask = 0;
      end
      ha.push_back(a_wmask != 0 ? -1 : int'(a_addr));
      hb.push_back(bb);
      #1;
      if (t >= 2) begin
        for (int k = 0; k < 4; k++) begin
          if (ha[t - 2] >= 0) begin
            checks++;
            if (a_rdata[k] !== ref_mem[k][ha[t - 2]]) begin
              failures++;
              $display("FAIL A blk %0d addr %0d", k, ha[t - 2]);
            end
          end
          checks++;
          if (b_rdata[k] !== ref_mem[k][hb[t - 2][k]]) begin
            failures++;
            $display("FAIL B blk %0d addr %0d", k, hb[t - 2][k]);
          end
        end
      end
      @(posedge clk);
      for (int k = 0; k < 4; k++) if (a_wmask[k]) ref_mem[k][a_addr] = a_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
