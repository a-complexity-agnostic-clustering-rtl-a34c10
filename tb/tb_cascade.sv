// tb_cascade: two clustering engines in cascade (cluster_engine_top with
// N_STAGES = 2) on events of single-track clusters entered in random order.
//
// Every cluster is a track that rises one channel per hit, on channels kept
// apart from the other tracks. After the second engine each cluster must
// leave in one piece and ordered from one end to the other (channels strictly
// rising or strictly falling), and the words must equal those predicted by
// applying the reference model twice.
`timescale 1ns/1ps
module tb_cascade;
  import ce_pkg::*;
  import tb_ce_model_pkg::*;

  logic  clk = 0, rst = 1, in_valid = 0, in_last = 0, in_ready, out_ready = 1;
  logic  out_valid, out_last, overflow;
  word_t in_data = 0, out_data;
  int checks = 0, failures = 0;
  int st [ST_N];
  int n_end_to_end = 0;

  cluster_engine_top #(.N_STAGES(2)) dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    foreach (st[i]) st[i] = 0;
    repeat (4) @(posedge clk);
    rst = 0;
    for (int e = 0; e < 4; e++) begin
      header_t ev [$], ev2 [$];
      word_t   w_in [$][8], w2 [$][8];
      int      trk [$], o1 [$], o2 [$], got_ch [$], got_trk [$];
      bit      v1 [$], v2 [$];
      int      ch0, nt, n, nw;
      ev = {}; ev2 = {}; w_in = {}; w2 = {}; trk = {}; got_ch = {};
      // tracks on channel bands 12 apart, 3..8 hits each
      nt = 6 + e * 3;
      for (int t = 0; t < nt; t++) begin
        int len, bin;
        len = int'($urandom_range(3, 8));
        ch0 = t * 12 + int'($urandom_range(0, 1));
        bin = int'($urandom_range(10, 110));
        for (int i = 0; i < len; i++) begin
          header_t h;
          h.flag = 1; h.ch = 8'(ch0 + i); h.tm = {7'(bin), 8'($urandom)};
          ev.push_back(h);
          trk.push_back(t);
          bin += int'($urandom_range(2)) - 1;
        end
      end
      // shuffle hits together with their track labels
      for (int i = ev.size() - 1; i > 0; i--) begin
        int j;
        header_t th;
        int tt;
        j = int'($urandom_range(i));
        th = ev[i]; ev[i] = ev[j]; ev[j] = th;
        tt = trk[i]; trk[i] = trk[j]; trk[j] = tt;
      end
      n = ev.size();
      foreach (ev[i]) begin
        word_t ws [8];
        for (int w = 0; w < 8; w++) ws[w] = make_word(ev[i], w, i);
        w_in.push_back(ws);
      end
      // reference: model of stage 1, then of stage 2 on stage 1's order
      cluster_order(ev, o1, v1, st);
      foreach (o1[k]) begin
        ev2.push_back(ev[o1[k]]);
        w2.push_back(w_in[o1[k]]);
      end
      cluster_order(ev2, o2, v2, st);

      fork
        foreach (ev[i])
          for (int w = 0; w < 8; w++) begin
            @(negedge clk);
            while (!in_ready) @(negedge clk);
            in_valid = 1; in_data = w_in[i][w];
            in_last = (i == n - 1) && (w == 7);
            @(posedge clk);
          end
        begin
          nw = 0;
          do begin
            @(posedge clk); #0.1;
            if (out_valid) begin
              if (nw / 8 < n) begin
                checks++;
                if (out_data !== w2[o2[nw / 8]][nw % 8]) begin
                  failures++;
                  if (failures < 5) $display("FAIL word %0d", nw);
                end
              end
              if (nw % 8 == 0) got_ch.push_back(int'(out_data[CH_W-1:0]));
              nw++;
            end
          end while (!out_last);
        end
      join_any
      @(negedge clk); in_valid = 0; in_last = 0;
      wait fork;
      check(nw == 8 * n, $sformatf("event %0d: %0d words for %0d hits", e, nw, n));
      // contiguity and end-to-end order, from the channel bands
      begin
        int runs, dir, t_prev, ok;
        runs = 0; ok = 1; t_prev = -1; dir = 0;
        foreach (got_ch[i]) begin
          int t;
          t = got_ch[i] / 12;
          if (t != t_prev) begin runs++; dir = 0; end
          else begin
            int d;
            d = got_ch[i] - got_ch[i - 1];
            if (!(d == 1 || d == -1) || (dir != 0 && d != dir)) ok = 0;
            dir = d;
          end
          t_prev = t;
        end
        check(runs == nt, $sformatf("event %0d: %0d runs for %0d tracks", e, runs, nt));
        check(ok == 1, $sformatf("event %0d: clusters ordered end to end", e));
        if (runs == nt && ok == 1) n_end_to_end++;
      end
      $display("event %0d: %0d hits, %0d tracks", e, n, nt);
    end
    check(n_end_to_end == 4, "cascade ordering seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
