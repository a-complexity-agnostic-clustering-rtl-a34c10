// tb_hit_indexing_unit: runs events of random size. The Priority Encoder and
// the Next Hit ID Unit are played by the testbench; it checks that the first
// slot takes the encoder's hit, every later slot takes the next-hit choice
// when offered and the encoder's otherwise, that each slot lasts 8 clocks
// with the Hit Buffer address {cur_id, 0..7}, that the bit of the current
// hit is cleared at clock 0, and that exactly nhits slots run.
`timescale 1ns/1ps
module tb_hit_indexing_unit;
  import ce_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  logic [HIT_NUM_W:0] nhits = 0;
  logic next_valid = 0, pe_any = 0;
  hitnum_t next_id = 0, pe_idx = 0, cur_id, bit_clr_idx;
  logic busy, done, slot_start, slot_active, last_slot, bit_clr;
  logic [WORD_IDX_W-1:0] phase;
  logic [HB_AW-1:0] hb_raddr;
  int checks = 0, failures = 0;

  hit_indexing_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    for (int e = 0; e < 20; e++) begin
      int n, slots, exp_id;
      n = (e == 0) ? 128 : int'($urandom_range(1, 40));
      pe_any = 1; pe_idx = 7'($urandom);
      exp_id = int'(pe_idx);
      @(negedge clk);
      start = 1; nhits = 8'(n);
      @(negedge clk);
      start = 0;
      slots = 0;
      // wait for the first slot
      while (!slot_start) @(negedge clk);
      while (slots < n) begin
        check(slot_start && slot_active, "slot start");
        check(int'(cur_id) == exp_id, $sformatf("slot %0d id %0d exp %0d", slots, cur_id, exp_id));
        check(bit_clr && bit_clr_idx == cur_id, "bit clear at clock 0");
        check(last_slot == (slots == n - 1), "last slot flag");
        for (int p = 0; p < 8; p++) begin
          check(hb_raddr == {7'(exp_id), 3'(p)}, "hit buffer address");
          if (p > 0) check(!slot_start && !bit_clr, "no start inside slot");
          if (p == 5) pe_idx = 7'($urandom);
          if (p == 7) begin
            next_valid = 1'($urandom);
            next_id = 7'($urandom);
          end
          @(negedge clk);
        end
        exp_id = next_valid ? int'(next_id) : int'(pe_idx);
        slots++;
      end
      check(!busy, "idle after nhits slots");
      repeat (12) begin
        check(!slot_start, "no slot after the event");
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
