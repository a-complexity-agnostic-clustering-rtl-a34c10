// hit_indexing_unit: sequencer of the readout phase.
//
// 'start' with nhits > 0 begins the readout of an event. After two clocks,
// in which the Priority Encoder output settles on the filled Bit Register,
// the unit runs exactly nhits slots of WORDS_PER_HIT clocks, one hit per
// slot, with 'phase' counting the clocks (0)..(7) of the slot:
//   clock (0)   slot_start; the Bit Register bit of cur_id is cleared;
//   clocks 0-7  the Hit Buffer is read at {cur_id, phase};
//   clock (7)   the Hit ID of the next slot is taken: the Next Hit ID Unit's
//               choice if it has one, else the highest unread Hit Number from
//               the (registered) Priority Encoder.
// The first slot starts from the Priority Encoder, i.e. the highest Hit
// Number. slot_active is low only if neither source had a hit, which cannot
// happen while the Bit Register and the slot count agree. last_slot marks
// the final slot; 'done' pulses after it. The slot structure, the clock
// numbers and the choice between the two sources are the paper's; the two
// start-up clocks and the clearing clock are this design's.
module hit_indexing_unit
  import ce_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      start,
  input  logic [HIT_NUM_W:0]        nhits,
  input  logic                      next_valid,
  input  hitnum_t                   next_id,
  input  logic                      pe_any,
  input  hitnum_t                   pe_idx,
  output logic                      busy,
  output logic                      done,
  output logic                      slot_start,
  output logic                      slot_active,
  output logic                      last_slot,
  output hitnum_t                   cur_id,
  output logic [WORD_IDX_W-1:0]     phase,
  output logic [HB_AW-1:0]          hb_raddr,
  output logic                      bit_clr,
  output hitnum_t                   bit_clr_idx
);
  typedef enum logic [1:0] {IDLE, PRIME, RUN} state_e;
  state_e               state;
  logic [1:0]           prime_cnt;
  logic [HIT_NUM_W:0]   left;       // slots still to run, this one included
  logic                 pe_any_q;
  hitnum_t              pe_idx_q;

  always_ff @(posedge clk) begin
    pe_any_q <= pe_any;
    pe_idx_q <= pe_idx;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= IDLE;
      prime_cnt   <= '0;
      left        <= '0;
      phase       <= '0;
      cur_id      <= '0;
      slot_active <= 1'b0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start && nhits != '0) begin
          state     <= PRIME;
          prime_cnt <= '0;
          left      <= nhits;
        end
        PRIME: begin
          prime_cnt <= prime_cnt + 1'b1;
          if (prime_cnt == 2'd1) begin
            state       <= RUN;
            phase       <= '0;
            cur_id      <= pe_idx_q;
            slot_active <= pe_any_q;
          end
        end
        RUN: begin
          phase <= phase + 1'b1;
          if (phase == WORD_IDX_W'(WORDS_PER_HIT - 1)) begin
            left <= left - 1'b1;
            if (left == 1) begin
              state <= IDLE;
              done  <= 1'b1;
            end
            cur_id      <= next_valid ? next_id : pe_idx_q;
            slot_active <= next_valid | pe_any_q;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy        = (state != IDLE);
  assign slot_start  = (state == RUN) && (phase == '0);
  assign last_slot   = (state == RUN) && (left == 1);
  assign hb_raddr    = {cur_id, phase};
  assign bit_clr     = slot_start && slot_active;
  assign bit_clr_idx = cur_id;
endmodule
