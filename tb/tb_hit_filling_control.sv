// tb_hit_filling_control: streams events of hits, some with stray words and
// gaps in in_valid, and checks every Hit Buffer write, Hit ID RAM request and
// Bit Register set against the hit list, then nhits, event_done and the
// overflow flag (an event of 130 hits drops two).
`timescale 1ns/1ps
module tb_hit_filling_control;
  import ce_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, in_last = 0;
  word_t in_data = 0;
  logic hb_we, ram_we, bit_set, event_done, overflow;
  logic [HB_AW-1:0] hb_waddr;
  word_t hb_wdata;
  tm_t ram_tm;
  ch_t ram_ch;
  hitnum_t ram_hitnum, bit_idx;
  logic [HIT_NUM_W:0] nhits;
  int checks = 0, failures = 0;

  // expected writes, pushed by the driver, popped by the monitor
  typedef struct { logic [HB_AW-1:0] a; word_t d; } hbw_t;
  typedef struct { tm_t tm; ch_t ch; hitnum_t n; } rw_t;
  hbw_t exp_hb [$];
  rw_t  exp_ram [$];
  int   exp_done [$];
  bit   exp_ovf [$];

  hit_filling_control dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // monitor
  always @(posedge clk) if (!rst) begin
    if (hb_we) begin
      hbw_t e;
      if (exp_hb.size() == 0) check(0, "unexpected hit buffer write");
      else begin
        e = exp_hb.pop_front();
        check(hb_waddr == e.a && hb_wdata == e.d, $sformatf("hb write %h/%h exp %h/%h", hb_waddr, hb_wdata, e.a, e.d));
      end
    end
    if (ram_we || bit_set) begin
      rw_t e;
      check(ram_we && bit_set && bit_idx == ram_hitnum, "RAM and bit requests together");
      if (exp_ram.size() == 0) check(0, "unexpected RAM write");
      else begin
        e = exp_ram.pop_front();
        check(ram_tm == e.tm && ram_ch == e.ch && ram_hitnum == e.n, "RAM request");
      end
    end
    if (event_done) begin
      check(exp_done.size() > 0 && int'(nhits) == exp_done[0], $sformatf("nhits %0d", nhits));
      check(exp_ovf.size() > 0 && overflow == exp_ovf[0], "overflow flag");
      void'(exp_done.pop_front());
      void'(exp_ovf.pop_front());
    end
  end

  task automatic send(word_t w, bit last);
    @(negedge clk);
    while ($urandom_range(4) == 0) begin
      in_valid = 0; @(negedge clk);
    end
    in_valid = 1; in_data = w; in_last = last;
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    for (int e = 0; e < 6; e++) begin
      int n;
      n = (e == 2) ? 130 : (e == 4 ? 128 : int'($urandom_range(1, 30)));
      // a stray sample before the first header is ignored
      send({24'h1, 24'h000002}, 0);
      for (int h = 0; h < n; h++) begin
        header_t hd;
        hd.flag = 1; hd.tm = 15'($urandom); hd.ch = 8'($urandom);
        for (int w = 0; w < 8; w++) begin
          word_t d;
          d = (w == 0) ? {24'($urandom) & 24'h7FFFFF, 24'(hd)} : {$urandom, 16'($urandom)} & 48'h7FFFFF_7FFFFF;
          if (h < MAX_HITS) begin
            exp_hb.push_back('{a: {7'(h), 3'(w)}, d: d});
            if (w == 0) exp_ram.push_back('{tm: hd.tm, ch: hd.ch, n: 7'(h)});
          end
          send(d, (h == n - 1) && (w == 7));
        end
        // an extra sample beyond 8 words in some hits is ignored
        if (h % 7 == 3 && h != n - 1) send(48'h000123_000456, 0);
      end
      exp_done.push_back(n > MAX_HITS ? MAX_HITS : n);
      exp_ovf.push_back(n > MAX_HITS);
      @(negedge clk); in_valid = 0; in_last = 0;
      repeat (3) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check(exp_hb.size() == 0 && exp_ram.size() == 0 && exp_done.size() == 0, "all writes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
