// ce_pkg: constants and types shared by the TPC clustering engine.
//
// A hit travels as WORDS_PER_HIT words of two half-words each: the header
// half-word plus 2*WORDS_PER_HIT-1 raw ADC samples. The header sits in the
// lower half of the first word and holds a header flag, the time stamp TM
// and the channel number CH. The Hit ID RAM is a Time x Channel map: the
// time bin is TM[14:8]; TM[9:8] selects one of four RAM blocks and
// {TM[14:10], CH[7:0]} is the address inside the block. Each RAM word is a
// Hit ID: a valid flag plus the Hit Number (running count of the hit in the
// event).
//
// Following the paper: 128 hits per event, 8 words per hit, CH[7:0],
// TM[14:8] as the time bin, four RAM blocks by TM[9:8]. This design's own
// choices: 24-bit half-words, the bit position of the header flag (bit 23 of
// the half-word, i.e. the MSB above TM and CH) and a 48-bit word.
package ce_pkg;

  localparam int unsigned MAX_HITS      = 128;
  localparam int unsigned HIT_NUM_W     = $clog2(MAX_HITS);      // 7
  localparam int unsigned WORDS_PER_HIT = 8;
  localparam int unsigned WORD_IDX_W    = $clog2(WORDS_PER_HIT);  // 3
  localparam int unsigned CH_W          = 8;
  localparam int unsigned TM_W          = 15;
  localparam int unsigned HALF_W        = 1 + TM_W + CH_W;        // 24
  localparam int unsigned WORD_W        = 2 * HALF_W;             // 48
  localparam int unsigned COARSE_W      = 5;                      // TM[14:10]
  localparam int unsigned RAM_AW        = COARSE_W + CH_W;        // 13
  localparam int unsigned ID_W          = 1 + HIT_NUM_W;          // 8
  localparam int unsigned N_BLK         = 4;                      // TM[9:8]
  localparam int unsigned HB_AW         = HIT_NUM_W + WORD_IDX_W; // 10

  typedef logic [WORD_W-1:0]    word_t;
  typedef logic [HIT_NUM_W-1:0] hitnum_t;
  typedef logic [CH_W-1:0]      ch_t;
  typedef logic [TM_W-1:0]      tm_t;
  typedef logic [RAM_AW-1:0]    ram_addr_t;

  // Header half-word (lower half of the first word of a hit).
  typedef struct packed {
    logic flag;   // 1 = hit header
    tm_t  tm;
    ch_t  ch;
  } header_t;

  // Hit ID RAM word.
  typedef struct packed {
    logic    valid;
    hitnum_t num;
  } hit_id_t;

  function automatic header_t word_header(word_t w);
    return header_t'(w[HALF_W-1:0]);
  endfunction

  function automatic ram_addr_t ram_addr(logic [COARSE_W-1:0] coarse, ch_t ch);
    return {coarse, ch};
  endfunction

endpackage
