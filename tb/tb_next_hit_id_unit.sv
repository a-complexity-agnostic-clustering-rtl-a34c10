// tb_next_hit_id_unit: random slots of CH+1 / CH-1 port-B reads. Checks the
// choice offered at clock 7: CH+1 first (bins TM, TM+1, TM-1 in that order,
// masked blocks ignored), then CH-1, then the CH-1 hit saved when both
// directions had a hit, provided its Bit Register bit is still set.
`timescale 1ns/1ps
module tb_next_hit_id_unit;
  import ce_pkg::*;
  logic clk = 0, rst = 1, start = 0, en_up = 0, en_dn = 0, decide = 0;
  logic [1:0] blk = 0;
  hit_id_t b_rdata [N_BLK];
  logic [3:0] sel_up = 0, sel_dn = 0;
  logic [MAX_HITS-1:0] bits = '1;
  logic next_valid;
  hitnum_t next_id;
  int checks = 0, failures = 0;
  int n_up = 0, n_dn = 0, n_saved = 0, n_none = 0;

  next_hit_id_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int first(hit_id_t d [N_BLK], logic [3:0] sel, logic [1:0] c);
    logic [1:0] o [3];
    o[0] = c; o[1] = c + 2'd1; o[2] = c - 2'd1;
    for (int i = 0; i < 3; i++) if (sel[o[i]] && d[o[i]].valid) return int'(d[o[i]].num);
    return -1;
  endfunction

  initial begin
    int up, dn, saved, exp_id;
    foreach (b_rdata[k]) b_rdata[k] = '0;
    @(negedge clk); @(negedge clk); rst = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    saved = -1;
    repeat (3000) begin
      blk = 2'($urandom);
      // clock 5: CH+1
      @(negedge clk);
      sel_up = 4'($urandom) | 4'b0001 << blk;
      foreach (b_rdata[k]) b_rdata[k] = '{valid: ($urandom_range(3) == 0), num: 7'($urandom)};
      up = first(b_rdata, sel_up, blk);
      en_up = 1;
      // clock 6: CH-1
      @(negedge clk);
      en_up = 0;
      sel_dn = 4'($urandom);
      foreach (b_rdata[k]) b_rdata[k] = '{valid: ($urandom_range(2) == 0), num: 7'($urandom)};
      dn = first(b_rdata, sel_dn, blk);
      en_dn = 1;
      // clock 7: decide
      @(negedge clk);
      en_dn = 0;
      foreach (b_rdata[k]) b_rdata[k] = '0;
      if (saved >= 0) bits[saved] = 1'($urandom_range(3) != 0);
      decide = 1;
      #1;
      if (up >= 0) begin exp_id = up; n_up++; if (dn >= 0) saved = dn; end
      else if (dn >= 0) begin exp_id = dn; n_dn++; end
      else if (saved >= 0 && bits[saved]) begin exp_id = saved; saved = -1; n_saved++; end
      else begin exp_id = -1; saved = -1; n_none++; end
      checks++;
      if (next_valid != (exp_id >= 0) || (exp_id >= 0 && int'(next_id) != exp_id)) begin
        failures++;
        $display("FAIL up=%0d dn=%0d exp %0d got %b/%0d", up, dn, exp_id, next_valid, next_id);
      end
      @(negedge clk);
      decide = 0;
      bits = '1;
    end
    checks++;
    if (n_up == 0 || n_dn == 0 || n_saved == 0 || n_none == 0) failures++;
    $display("up=%0d dn=%0d saved=%0d none=%0d", n_up, n_dn, n_saved, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
