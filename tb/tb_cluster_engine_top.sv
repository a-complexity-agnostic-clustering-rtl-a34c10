// tb_cluster_engine_top: end-to-end test of the clustering engine at its
// default size (128 hits per event, one engine).
//
// Each event is generated here, streamed in word by word, and the output is
// compared with the reference model of tb_ce_model_pkg: the same hits must
// leave in the modelled cluster order, word for word, with out_valid low only
// for hits the model flags invalid. Timing checks: the first output word
// leaves 13 clocks after the last input word is taken and the output phase
// lasts exactly 8 clocks per hit, as long as the fill phase.
// Events: a 110-hit, 28-cluster event, an event with long clusters, a cluster
// laid out to enter in its middle (CH+1 first, then back to CH-1), hits on
// the map edges, a double hit in one cell, an event of 131 hits (overflow),
// an empty event, a full 128-hit event and 30 events of random complexity,
// some with tracks packed together so that they branch. The tally of the model's rules
// shows each mechanism occurred.
`timescale 1ns/1ps
module tb_cluster_engine_top;
  import ce_pkg::*;
  import tb_ce_model_pkg::*;

  logic  clk = 1'b0, rst = 1'b1;
  logic  in_valid = 1'b0, in_last = 1'b0, in_ready;
  word_t in_data = '0;
  logic  out_ready = 1'b1, out_valid, out_last, overflow;
  word_t out_data;

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  int st [ST_N];
  int n_overflow = 0, n_empty = 0;

  cluster_engine_top dut (.*);

  always #2.5 clk = ~clk;          // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL at cycle %0d: %s", cyc, what);
    end
  endtask

  // ---------------------------------------------------------------- events
  header_t ev [$];
  bit      occ [N_BINS][N_CH];

  function automatic header_t hdr(int bin, int ch);
    header_t h;
    h.flag = 1'b1;
    h.tm   = {7'(bin), 8'($urandom)};
    h.ch   = 8'(ch);
    return h;
  endfunction

  task automatic clear_event();
    ev = {};
    for (int b = 0; b < N_BINS; b++)
      for (int c = 0; c < N_CH; c++) occ[b][c] = 1'b0;
  endtask

  // a cluster: a walk upward in channel, time bin drifting by -1, 0 or +1
  task automatic add_cluster(int bin, int ch, int len);
    for (int i = 0; i < len; i++) begin
      if (ch > 255 || bin < 0 || bin > 127 || occ[bin][ch]) break;
      occ[bin][ch] = 1'b1;
      ev.push_back(hdr(bin, ch));
      ch++;
      bin += int'($urandom_range(2)) - 1;
    end
  endtask

  task automatic shuffle_event();
    for (int i = ev.size() - 1; i > 0; i--) begin
      int j = int'($urandom_range(i));
      header_t t = ev[i];
      ev[i] = ev[j];
      ev[j] = t;
    end
  endtask

  // ------------------------------------------------------- run one event
  task automatic run_event(string name, bit expect_ovf);
    int order [$];
    bit valid [$];
    word_t exp_words [$];
    int n, n_inv, got, t_last_in, t_first_out, t_last_out;
    bit seen_first;
    cluster_order(ev, order, valid, st);
    n = (ev.size() > MAX_HITS) ? MAX_HITS : ev.size();
    n_inv = 0;
    foreach (order[k]) begin
      if (valid[k])
        for (int w = 0; w < WORDS_PER_HIT; w++)
          exp_words.push_back(make_word(ev[order[k]], w, order[k]));
      else n_inv++;
    end
    fork
      begin : drive
        if (ev.size() == 0) begin
          @(negedge clk);
          while (!in_ready) @(negedge clk);
          in_valid = 1'b1; in_data = '0; in_last = 1'b1;
          @(posedge clk);
          t_last_in = int'(cyc);
          @(negedge clk);
          in_valid = 1'b0; in_last = 1'b0;
        end else begin
          foreach (ev[i])
            for (int w = 0; w < WORDS_PER_HIT; w++) begin
              @(negedge clk);
              while (!in_ready) @(negedge clk);
              in_valid = 1'b1;
              in_data  = make_word(ev[i], w, i);
              in_last  = (i == ev.size() - 1) && (w == WORDS_PER_HIT - 1);
              @(posedge clk);
              if (in_last) t_last_in = int'(cyc);
            end
          @(negedge clk);
          in_valid = 1'b0; in_last = 1'b0;
        end
      end
      begin : collect
        got = 0;
        seen_first = 1'b0;
        if (n > 0) begin
          do begin
            @(posedge clk);
            #0.1;
            if (out_valid) begin
              if (!seen_first) begin seen_first = 1'b1; t_first_out = int'(cyc); end
              if (got < exp_words.size()) begin
                checks++;
                if (out_data !== exp_words[got]) begin
                  failures++;
                  $display("FAIL %s: word %0d got %h exp %h", name, got, out_data, exp_words[got]);
                end
              end
              got++;
            end
          end while (!out_last);
          t_last_out = int'(cyc);
        end else begin
          repeat (40) begin
            @(posedge clk);
            #0.1;
            if (out_valid || out_last) got++;
          end
        end
      end
    join
    check(got == exp_words.size(), $sformatf("%s: %0d words out, %0d expected", name, got, exp_words.size()));
    check(overflow == expect_ovf, $sformatf("%s: overflow flag %0b", name, overflow));
    if (expect_ovf) n_overflow++;
    if (n == 0) n_empty++;
    if (n > 0) begin
      check(t_first_out - t_last_in == 13,
            $sformatf("%s: first output %0d clocks after last input", name, t_first_out - t_last_in));
      check(t_last_out - t_first_out + 1 == WORDS_PER_HIT * n,
            $sformatf("%s: output phase %0d clocks for %0d hits", name, t_last_out - t_first_out + 1, n));
    end
    $display("%s: %0d hits, %0d sent invalid, %0d words checked", name, n, n_inv, got);
  endtask

  initial begin
    foreach (st[i]) st[i] = 0;
    repeat (4) @(posedge clk);
    rst = 1'b0;

    // Event like the paper's Fig. 6: 28 clusters, about 110 hits.
    clear_event();
    for (int c = 0; c < 28; c++)
      add_cluster(int'($urandom_range(4, 120)), int'($urandom_range(0, 240)),
                  (110 - ev.size()) / (28 - c));
    shuffle_event();
    run_event("fig6-like", 1'b0);

    // Long clusters (Fig. 8).
    clear_event();
    add_cluster(10, 2, 60);
    add_cluster(70, 100, 60);
    shuffle_event();
    run_event("long clusters", 1'b0);

    // One cluster on channels 170..182 entered at channel 175 (Fig. 7(b)).
    clear_event();
    for (int c = 170; c <= 182; c++) if (c != 175) ev.push_back(hdr(60 + (c - 170) / 3, c));
    shuffle_event();
    ev.push_back(hdr(61, 175));
    run_event("enter mid-cluster", 1'b0);

    // Edges of the map.
    clear_event();
    ev.push_back(hdr(0, 0));   ev.push_back(hdr(1, 1));   ev.push_back(hdr(0, 2));
    ev.push_back(hdr(127, 255)); ev.push_back(hdr(127, 254)); ev.push_back(hdr(126, 253));
    ev.push_back(hdr(127, 0)); ev.push_back(hdr(0, 255));
    shuffle_event();
    run_event("map edges", 1'b0);

    // Double hit in one cell; the earlier one is flagged invalid.
    clear_event();
    ev.push_back(hdr(40, 50)); ev.push_back(hdr(40, 51)); ev.push_back(hdr(40, 50));
    ev.push_back(hdr(41, 52));
    run_event("double hit", 1'b0);

    // 131 hits: three are dropped.
    clear_event();
    for (int i = 0; i < 131; i++) ev.push_back(hdr(int'($urandom_range(127)), (i * 2) % 256));
    run_event("overflow", 1'b1);

    // Empty event.
    clear_event();
    run_event("empty", 1'b0);

    // Full event: 128 hits of random clusters.
    clear_event();
    while (ev.size() < MAX_HITS)
      add_cluster(int'($urandom_range(0, 127)), int'($urandom_range(0, 255)), int'($urandom_range(1, 12)));
    while (ev.size() > MAX_HITS) void'(ev.pop_back());
    shuffle_event();
    run_event("full 128 hits", 1'b0);

    // Random complexity: 1 to 60 clusters of 1 to 40 hits, some packed into a
    // small area so that tracks touch and branch.
    for (int e = 0; e < 30; e++) begin
      int nc, maxlen, bspan, cspan;
      clear_event();
      nc     = int'($urandom_range(1, 60));
      maxlen = int'($urandom_range(1, 40));
      bspan  = (e % 3 == 0) ? 12 : 127;
      cspan  = (e % 3 == 0) ? 40 : 255;
      for (int c = 0; c < nc && ev.size() < MAX_HITS; c++)
        add_cluster(int'($urandom_range(0, bspan)), int'($urandom_range(0, cspan)),
                    int'($urandom_range(1, maxlen)));
      while (ev.size() > MAX_HITS) void'(ev.pop_back());
      shuffle_event();
      run_event($sformatf("random %0d", e), 1'b0);
    end

    $display("mechanisms: new-cluster=%0d ch+1=%0d ch-1=%0d saved-return=%0d double-hit=%0d edge=%0d overflow=%0d empty=%0d",
             st[ST_NEW], st[ST_UP], st[ST_DN], st[ST_SAVED], st[ST_DBL], st[ST_EDGE], n_overflow, n_empty);
    check(st[ST_NEW] > 0,   "new cluster never started");
    check(st[ST_UP] > 0,    "CH+1 never followed");
    check(st[ST_DN] > 0,    "CH-1 never followed");
    check(st[ST_SAVED] > 0, "saved CH-1 hit never used");
    check(st[ST_DBL] > 0,   "double hit never occurred");
    check(st[ST_EDGE] > 0,  "map edge never reached");
    check(n_overflow > 0,   "overflow never occurred");
    check(n_empty > 0,      "empty event never run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
