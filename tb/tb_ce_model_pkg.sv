// tb_ce_model_pkg: reference model and stimulus helpers for the clustering
// engine testbenches.
//
// cluster_order() replays the readout rules on a list of hit headers, one
// hit per step, with plain arrays instead of RAM pipelines: the Time x
// Channel map (last write wins), the unread-hit flags, the CH+1-first choice
// with TM+0, TM+1, TM-1 order inside a channel, the single saved CH-1 hit,
// and the highest unread Hit Number as the start of a new cluster. It returns
// the Hit Numbers in output order, the valid flag of each, and counts of how
// often each rule fired (see the ST_* indices).
// make_word() builds a hit word: word 0 carries the header in its lower half,
// every other half-word is a sample with the flag bit clear.
package tb_ce_model_pkg;
  import ce_pkg::*;

  localparam int N_BINS = 128;
  localparam int N_CH   = 256;

  localparam int ST_NEW   = 0;  // new cluster from the priority encoder
  localparam int ST_UP    = 1;  // followed a CH+1 hit
  localparam int ST_DN    = 2;  // followed a CH-1 hit
  localparam int ST_SAVED = 3;  // went back to the saved CH-1 hit
  localparam int ST_DBL   = 4;  // hit sent out invalid (cell taken by a later hit)
  localparam int ST_EDGE  = 5;  // search cut at the edge of the map
  localparam int ST_N     = 6;

  function automatic word_t make_word(header_t h, int unsigned w, int unsigned seed);
    logic [HALF_W-1:0] lo, hi;
    hi = HALF_W'(seed * 32'h9E37_79B9 + w * 32'h85EB_CA6B);
    hi[HALF_W-1] = 1'b0;
    if (w == 0) lo = HALF_W'(h);
    else begin
      lo = HALF_W'(seed * 32'hC2B2_AE35 + w * 32'h27D4_EB2F);
      lo[HALF_W-1] = 1'b0;
    end
    return {hi, lo};
  endfunction

  function automatic int first_in_channel(ref int map[N_BINS][N_CH], input int bin, int ch,
                                          ref int st[ST_N]);
    int cand [3];
    cand[0] = bin; cand[1] = bin + 1; cand[2] = bin - 1;
    if (ch < 0 || ch >= N_CH) begin
      st[ST_EDGE]++;
      return -1;
    end
    for (int i = 0; i < 3; i++) begin
      if (cand[i] < 0 || cand[i] >= N_BINS) begin
        st[ST_EDGE]++;
        continue;
      end
      if (map[cand[i]][ch] >= 0) return map[cand[i]][ch];
    end
    return -1;
  endfunction

  function automatic void cluster_order(input header_t hdr[$], output int order[$],
                                        output bit valid[$], ref int st[ST_N]);
    int map [N_BINS][N_CH];
    bit unread [$];
    int n, cur, up, dn, saved;
    order = {};
    valid = {};
    for (int b = 0; b < N_BINS; b++)
      for (int c = 0; c < N_CH; c++) map[b][c] = -1;
    n = (hdr.size() > MAX_HITS) ? MAX_HITS : hdr.size();
    for (int i = 0; i < n; i++) begin
      map[hdr[i].tm[14:8]][hdr[i].ch] = i;
      unread.push_back(1'b1);
    end
    saved = -1;
    cur = n - 1;
    if (n > 0) st[ST_NEW]++;
    for (int k = 0; k < n; k++) begin
      int bin, ch;
      bin = int'(hdr[cur].tm[14:8]);
      ch  = int'(hdr[cur].ch);
      order.push_back(cur);
      unread[cur] = 1'b0;
      valid.push_back(map[bin][ch] >= 0);
      if (map[bin][ch] < 0) st[ST_DBL]++;
      map[bin][ch] = -1;
      if (k == n - 1) break;
      up = first_in_channel(map, bin, ch + 1, st);
      dn = first_in_channel(map, bin, ch - 1, st);
      if (up >= 0) begin
        if (dn >= 0) saved = dn;
        cur = up;
        st[ST_UP]++;
      end else if (dn >= 0) begin
        cur = dn;
        st[ST_DN]++;
      end else if (saved >= 0 && unread[saved]) begin
        cur = saved;
        saved = -1;
        st[ST_SAVED]++;
      end else begin
        saved = -1;
        cur = -1;
        for (int i = n - 1; i >= 0; i--)
          if (unread[i]) begin
            cur = i;
            break;
          end
        st[ST_NEW]++;
      end
    end
  endfunction
endpackage
