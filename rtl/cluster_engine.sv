// cluster_engine: complexity-agnostic clustering engine for TPC hit data.
//
// The engine takes one event of hits, each hit WORDS_PER_HIT words long with
// a header {flag, TM, CH}, and sends the same hits out again reordered so that
// the hits of each cluster (hits on neighbouring channels with equal or
// adjacent time bins) leave one after another. It works in two phases:
//
//   fill    every word is stored in the Hit Buffer; every header enters its
//           Hit ID {valid, Hit Number} in the Time x Channel Hit ID RAM at
//           {TM[14:8], CH} and sets its bit in the Bit Register.
//   read    one 8-clock slot per hit. The slot reads the hit's words from the
//           Hit Buffer, takes TM and CH from its header (clock 2), reads and
//           clears the hit's own RAM cell on port A (clocks 3, 4) and reads
//           the three time bins of channel CH+1 (clock 3) and CH-1 (clock 4)
//           on port B of the four RAM blocks. The Next Hit ID Unit picks the
//           next hit of the cluster (CH+1 first); when there is none the
//           Priority Encoder gives the highest unread Hit Number, which opens
//           a new cluster. There are exactly as many slots as hits, so the
//           read phase lasts as long as the fill phase whatever the event.
//
// Interface: in_valid/in_data/in_last with in_ready (high only in the fill
// phase); out_valid/out_data/out_last. The words of the hit read in a slot
// leave during the following slot (clocks 8..15 of its slot), with out_valid
// taken from the Current Hit Valid Unit; out_last marks the last word of the
// event. The read phase starts only while out_ready is high, so a following
// engine can hold it back until it can take the whole event.
//
// Follows the paper: the block structure, the phases, the clock numbers of
// the slot, the RAM organisation and addressing, the CH+1-first search.
// This design's own: the word format, the framing and handshake signals, the
// one-time clear of the Hit ID RAM after reset (2**13 clocks, in_ready low),
// the output timing and the handling of map edges and double hits.
module cluster_engine
  import ce_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  word_t in_data,
  input  logic  in_last,
  output logic  in_ready,
  input  logic  out_ready,
  output logic  out_valid,
  output word_t out_data,
  output logic  out_last,
  output logic  overflow
);
  typedef enum logic [2:0] {S_INIT, S_FILL, S_CLOSE, S_HOLD, S_READ} state_e;
  state_e state;

  // ---------------------------------------------------------------- control
  ram_addr_t          init_addr;
  logic               idx_done_seen;
  logic [15:0]        stage;

  // fill unit
  logic               hb_we, ram_we, bit_set, event_done;
  logic [HB_AW-1:0]   hb_waddr;
  word_t              hb_wdata;
  tm_t                ram_tm;
  ch_t                ram_ch;
  hitnum_t            ram_hitnum, bit_idx;
  logic [HIT_NUM_W:0] nhits, nhits_q;

  // readout
  logic               idx_start, idx_busy, idx_done, slot_start, slot_active, last_slot;
  hitnum_t            cur_id, next_id, pe_idx, bit_clr_idx;
  logic [WORD_IDX_W-1:0] phase;
  logic [HB_AW-1:0]   hb_raddr;
  logic               bit_clr, next_valid, pe_any;
  logic [MAX_HITS-1:0] bits;
  word_t              hb_rdata;
  header_t            cur_hdr;

  // Hit ID RAM
  ram_addr_t          a_addr;
  logic [N_BLK-1:0]   a_wmask, sel_up, sel_dn;
  hit_id_t            a_wdata;
  hit_id_t            a_rdata [N_BLK];
  hit_id_t            b_rdata [N_BLK];
  ram_addr_t          b_addr  [N_BLK];
  logic [1:0]         cur_blk;
  logic               cur_valid, hold_valid, hold_last;

  assign in_ready  = (state == S_FILL);
  assign idx_start = (state == S_HOLD) && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= S_INIT;
      init_addr     <= '0;
      nhits_q       <= '0;
      idx_done_seen <= 1'b0;
    end else begin
      unique case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (init_addr == '1) state <= S_FILL;
        end
        S_FILL:  if (in_valid && in_last) state <= S_CLOSE;
        S_CLOSE: if (event_done) begin
          nhits_q <= nhits;
          state   <= (nhits == '0) ? S_FILL : S_HOLD;
        end
        S_HOLD: if (out_ready) begin
          state         <= S_READ;
          idx_done_seen <= 1'b0;
        end
        S_READ: begin
          if (idx_done) idx_done_seen <= 1'b1;
          if (idx_done_seen && stage == '0) state <= S_FILL;
        end
        default: state <= S_INIT;
      endcase
    end
  end

  // ------------------------------------------------------------- fill phase
  hit_filling_control u_fill (
    .clk, .rst,
    .in_valid (in_valid && in_ready),
    .in_data, .in_last,
    .hb_we, .hb_waddr, .hb_wdata,
    .ram_we, .ram_tm, .ram_ch, .ram_hitnum,
    .bit_set, .bit_idx,
    .event_done, .nhits, .overflow
  );

  hit_buffer #(.DEPTH(MAX_HITS * WORDS_PER_HIT), .WIDTH(WORD_W)) u_hb (
    .clk, .we(hb_we), .waddr(hb_waddr), .wdata(hb_wdata),
    .raddr(hb_raddr), .rdata(hb_rdata)
  );

  bit_register #(.N(MAX_HITS)) u_bits (
    .clk, .rst,
    .set_en(bit_set), .set_idx(bit_idx),
    .clr_en(bit_clr), .clr_idx(bit_clr_idx),
    .bits
  );

  priority_encoder #(.N(MAX_HITS)) u_pe (.bits, .any(pe_any), .idx(pe_idx));

  // ------------------------------------------------------------ read phase
  hit_indexing_unit u_idx (
    .clk, .rst,
    .start(idx_start), .nhits(nhits_q),
    .next_valid, .next_id, .pe_any, .pe_idx,
    .busy(idx_busy), .done(idx_done),
    .slot_start, .slot_active, .last_slot,
    .cur_id, .phase, .hb_raddr,
    .bit_clr, .bit_clr_idx
  );

  control_signal_pipeline #(.DEPTH(16)) u_ctl (
    .clk, .rst, .slot_start, .slot_active, .stage
  );

  assign cur_hdr = word_header(hb_rdata);

  hit_id_addr1_unit u_addr1 (
    .clk, .rst,
    .init_we(state == S_INIT), .init_addr,
    .fill_we(ram_we), .fill_tm(ram_tm), .fill_ch(ram_ch), .fill_hitnum(ram_hitnum),
    .ld(stage[2]), .ld_tm(cur_hdr.tm), .ld_ch(cur_hdr.ch),
    .clr(stage[4]),
    .a_addr, .a_wmask, .a_wdata, .cur_blk
  );

  addr2_unit u_addr2 (
    .clk, .rst,
    .ld(stage[2]), .ld_tm(cur_hdr.tm), .ld_ch(cur_hdr.ch),
    .en_up(stage[3]), .en_dn(stage[4]),
    .b_addr, .sel_up, .sel_dn
  );

  hit_id_ram #(.ADDR_W(RAM_AW), .DATA_W(ID_W), .N_BLK(N_BLK)) u_ram (
    .clk,
    .a_addr, .a_wmask, .a_wdata,
    .a_rdata, .b_addr, .b_rdata
  );

  current_hit_valid_unit u_chv (
    .clk, .rst, .en(stage[5]), .blk(cur_blk), .a_rdata, .cur_valid
  );

  next_hit_id_unit u_next (
    .clk, .rst, .start(idx_start), .blk(cur_blk),
    .en_up(stage[5]), .en_dn(stage[6]), .decide(stage[7]),
    .b_rdata, .sel_up, .sel_dn, .bits,
    .next_valid, .next_id
  );

  // ---------------------------------------------------------------- output
  delay_pipeline #(.DEPTH(6), .WIDTH(WORD_W)) u_dly (
    .clk, .din(hb_rdata), .dout(out_data)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      hold_valid <= 1'b0;
      hold_last  <= 1'b0;
    end else if (stage[7]) begin
      hold_valid <= cur_valid;
      hold_last  <= last_slot;
    end
  end

  assign out_valid = hold_valid && (stage[15:8] != '0);
  assign out_last  = hold_last && stage[15];

  // The readout must never pick a hit whose bit is already cleared.
  a_next_unread: assert property (@(posedge clk) disable iff (rst)
    stage[7] && next_valid |-> bits[next_id]);
  // A slot always starts on an unread hit.
  a_slot_unread: assert property (@(posedge clk) disable iff (rst)
    slot_start && slot_active |-> bits[cur_id]);
  // Port A is written by the fill unit only outside the read phase.
  a_fill_port: assert property (@(posedge clk) disable iff (rst)
    ram_we |-> state inside {S_FILL, S_CLOSE});
  // Words are sent only in the read phase, and only at the slot's output clocks.
  a_out_in_read: assert property (@(posedge clk) disable iff (rst)
    out_valid |-> state == S_READ);
endmodule
