// hit_filling_control: the data filling phase of the clustering engine.
//
// Input is a stream of words (in_valid), WORDS_PER_HIT per hit, with the hit
// header in the lower half of a hit's first word; its flag bit marks it. For
// every header the unit gives the hit the next Hit Number of the event and,
// one clock later (all outputs are registered):
//   - writes the word to the Hit Buffer at {Hit Number, 0},
//   - asks for the Hit ID {1, Hit Number} to be written to the Hit ID RAM at
//     the header's {TM, CH},
//   - sets the hit's bit in the Bit Register.
// The following words of the hit go to {Hit Number, 1..WORDS_PER_HIT-1}.
// in_last on the last word of the event ends it: event_done pulses with the
// hit count nhits, and overflow tells whether hits beyond MAX_HITS had to be
// dropped. The counters restart for the next event.
// Header detection, the Hit Number as running count and the 128-hit limit are
// the paper's; in_last framing, the buffer address layout and dropping (not
// storing) excess hits or excess words are this design's choices.
module hit_filling_control
  import ce_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  word_t                in_data,
  input  logic                 in_last,
  output logic                 hb_we,
  output logic [HB_AW-1:0]     hb_waddr,
  output word_t                hb_wdata,
  output logic                 ram_we,
  output tm_t                  ram_tm,
  output ch_t                  ram_ch,
  output hitnum_t              ram_hitnum,
  output logic                 bit_set,
  output hitnum_t              bit_idx,
  output logic                 event_done,
  output logic [HIT_NUM_W:0]   nhits,
  output logic                 overflow
);
  logic [HIT_NUM_W:0]    hit_cnt;      // hits stored so far in this event
  logic [WORD_IDX_W:0]   word_idx;     // next word index of the open hit
  logic                  in_hit;       // a stored hit is open
  logic                  ovf_evt;
  hitnum_t               cur_num;

  header_t hdr;
  assign hdr = word_header(in_data);

  always_ff @(posedge clk) begin
    if (rst) begin
      hit_cnt    <= '0;
      word_idx   <= '0;
      in_hit     <= 1'b0;
      ovf_evt    <= 1'b0;
      cur_num    <= '0;
      hb_we      <= 1'b0;
      hb_waddr   <= '0;
      hb_wdata   <= '0;
      ram_we     <= 1'b0;
      ram_tm     <= '0;
      ram_ch     <= '0;
      ram_hitnum <= '0;
      bit_set    <= 1'b0;
      bit_idx    <= '0;
      event_done <= 1'b0;
      nhits      <= '0;
      overflow   <= 1'b0;
    end else begin
      logic [HIT_NUM_W:0] cnt_n;
      logic               ovf_n;
      hb_we      <= 1'b0;
      ram_we     <= 1'b0;
      bit_set    <= 1'b0;
      event_done <= 1'b0;
      cnt_n = hit_cnt;
      ovf_n = ovf_evt;
      if (in_valid) begin
        if (hdr.flag) begin
          if (hit_cnt < (HIT_NUM_W+1)'(MAX_HITS)) begin
            hb_we      <= 1'b1;
            hb_waddr   <= {hit_cnt[HIT_NUM_W-1:0], WORD_IDX_W'(0)};
            hb_wdata   <= in_data;
            ram_we     <= 1'b1;
            ram_tm     <= hdr.tm;
            ram_ch     <= hdr.ch;
            ram_hitnum <= hit_cnt[HIT_NUM_W-1:0];
            bit_set    <= 1'b1;
            bit_idx    <= hit_cnt[HIT_NUM_W-1:0];
            cur_num    <= hit_cnt[HIT_NUM_W-1:0];
            in_hit     <= 1'b1;
            word_idx   <= 1;
            cnt_n      = hit_cnt + 1'b1;
          end else begin
            in_hit <= 1'b0;
            ovf_n  = 1'b1;
          end
        end else if (in_hit && word_idx < (WORD_IDX_W+1)'(WORDS_PER_HIT)) begin
          hb_we    <= 1'b1;
          hb_waddr <= {cur_num, word_idx[WORD_IDX_W-1:0]};
          hb_wdata <= in_data;
          word_idx <= word_idx + 1'b1;
        end
        if (in_last) begin
          event_done <= 1'b1;
          nhits      <= cnt_n;
          overflow   <= ovf_n;
          cnt_n      = '0;
          ovf_n      = 1'b0;
          in_hit     <= 1'b0;
        end
      end
      hit_cnt <= cnt_n;
      ovf_evt <= ovf_n;
    end
  end
endmodule
