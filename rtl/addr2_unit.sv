// addr2_unit: port-B addresses for the neighbour search (the paper's ADDR2
// Unit and its Fig. 4 scheme).
//
// At readout clock (2) 'ld' captures TM and CH of the current hit. During
// clock (3) (en_up) the four blocks are addressed at channel CH+1, during
// clock (4) (en_dn) at CH-1. Block k always covers the time bin nearest the
// current bin whose TM[9:8] equals k, so with the current block c:
//   c = 0: block 3 uses TM[14:10]-1, the others TM[14:10]
//   c = 3: block 0 uses TM[14:10]+1, the others TM[14:10]
//   c = 1, 2: every block uses TM[14:10]
// Blocks c-1, c and c+1 (mod 4) hold time bins TM-1, TM and TM+1 and are
// the ones searched; sel_up/sel_dn mark them, registered with 'ld' and held
// for the slot, so that the Next Hit ID Unit can mask the other block. This
// scheme is the paper's. Not searching beyond the map edges (CH 0/255, time
// bin 0/127) instead of wrapping around is this design's choice.
module addr2_unit
  import ce_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             ld,
  input  tm_t              ld_tm,
  input  ch_t              ld_ch,
  input  logic             en_up,
  input  logic             en_dn,
  output ram_addr_t        b_addr [N_BLK],
  output logic [N_BLK-1:0] sel_up,
  output logic [N_BLK-1:0] sel_dn
);
  localparam int unsigned BIN_W = TM_W - 8;   // time bin TM[14:8]

  logic [COARSE_W-1:0] coarse;
  logic [1:0]          blk;
  ch_t                 ch;

  // Blocks searched for the time bins TM-1, TM, TM+1, without leaving the map.
  function automatic logic [N_BLK-1:0] search_mask(logic [BIN_W-1:0] bin);
    logic [1:0] b = bin[1:0];
    logic [N_BLK-1:0] m;
    m = N_BLK'(1) << b;
    if (bin != '0) m |= N_BLK'(1) << (b - 2'd1);
    if (bin != '1) m |= N_BLK'(1) << (b + 2'd1);
    return m;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      coarse <= '0;
      blk    <= '0;
      ch     <= '0;
      sel_up <= '0;
      sel_dn <= '0;
    end else if (ld) begin
      coarse <= ld_tm[14:10];
      blk    <= ld_tm[9:8];
      ch     <= ld_ch;
      sel_up <= (ld_ch == '1) ? '0 : search_mask(ld_tm[14:8]);
      sel_dn <= (ld_ch == '0) ? '0 : search_mask(ld_tm[14:8]);
    end
  end

  always_comb begin
    ch_t b_ch;
    b_ch = en_dn ? ch - 1'b1 : ch + 1'b1;
    for (int k = 0; k < N_BLK; k++) begin
      logic [COARSE_W-1:0] c;
      c = coarse;
      if (blk == 2'd0 && k == 3) c = coarse - 1'b1;
      if (blk == 2'd3 && k == 0) c = coarse + 1'b1;
      b_addr[k] = (en_up || en_dn) ? ram_addr(c, b_ch) : '0;
    end
  end
endmodule
