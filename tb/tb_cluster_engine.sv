// tb_cluster_engine: the engine on the two clusters of the paper's Fig. 7(b),
// with the output order worked out by hand, and the out_ready hold-off.
//
// Cluster A covers channels 170..182 with channel 175 entered last (highest
// Hit Number, so it opens the readout); cluster B covers 160..164 with 164
// entered just before 175. Following CH+1 first, then returning to the saved
// CH-1 hit, the engine must send
//   175 176 177 178 179 180 181 182 174 173 172 171 170 164 163 162 161 160
// The read phase is held off with out_ready low for 100 clocks; no word may
// leave and in_ready must stay low; the first word must appear 11 clocks
// after out_ready rises, and the output must last 8 clocks per hit.
`timescale 1ns/1ps
module tb_cluster_engine;
  import ce_pkg::*;
  logic  clk = 0, rst = 1, in_valid = 0, in_last = 0, in_ready, out_ready = 0;
  logic  out_valid, out_last, overflow;
  word_t in_data = 0, out_data;
  int checks = 0, failures = 0;

  cluster_engine dut (.*);
  always #2.5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic header_t hdr(int ch);
    header_t h;
    h.flag = 1;
    h.ch = 8'(ch);
    // time bins roughly along a track: bin 100 + (ch - 160) / 3
    h.tm = {7'(100 + (ch - 160) / 3), 8'(ch)};
    return h;
  endfunction

  int in_ch [$];
  int exp_ch [$] = '{175, 176, 177, 178, 179, 180, 181, 182, 174, 173, 172, 171, 170,
                     164, 163, 162, 161, 160};

  initial begin
    int k, n_words, got_ch [$];
    int a [$] = '{170, 171, 172, 173, 174, 176, 177, 178, 179, 180, 181, 182};
    int b [$] = '{160, 161, 162, 163};
    a.shuffle();
    b.shuffle();
    in_ch = {b, a, 164, 175};
    repeat (4) @(posedge clk);
    rst = 0;
    foreach (in_ch[i])
      for (int w = 0; w < 8; w++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1;
        in_data = (w == 0) ? {24'(i), 24'(hdr(in_ch[i]))} : {24'(i), 24'(w)};
        in_last = (i == in_ch.size() - 1) && (w == 7);
      end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    repeat (100) begin
      @(negedge clk);
      check(!out_valid && !in_ready, "held while out_ready low");
    end
    out_ready = 1;
    k = 0;
    do begin
      @(posedge clk); #0.1; k++;
    end while (!out_valid && k < 100);
    check(k == 11, $sformatf("first word %0d clocks after out_ready", k));
    n_words = 0;
    while (1) begin
      if (out_valid) begin
        if (n_words % 8 == 0) begin
          header_t h;
          h = word_header(out_data);
          check(h.flag == 1, "header first");
          got_ch.push_back(int'(h.ch));
        end else check(out_data[23:0] == 24'(n_words % 8), "sample word order");
        n_words++;
      end
      if (out_last) break;
      @(posedge clk); #0.1;
    end
    check(n_words == 8 * exp_ch.size(), $sformatf("%0d words", n_words));
    check(got_ch == exp_ch, "cluster order of Fig. 7(b)");
    foreach (got_ch[i]) $write("%0d ", got_ch[i]);
    $display("");
    repeat (3) @(negedge clk);
    check(in_ready, "back to filling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
