// next_hit_id_unit: chooses the next hit of the current cluster.
//
// The port-B reads arrive at readout clock (5) for channel CH+1 and at clock
// (6) for CH-1, one Hit ID per RAM block. Within each channel the unit keeps
// the first valid Hit ID among the searched blocks (sel mask), in the order
// time bin TM+0, TM+1, TM-1. At clock (7) ('decide') it offers:
//   1. the CH+1 hit, if any; if a CH-1 hit exists too it is saved;
//   2. else the CH-1 hit, if any;
//   3. else the saved CH-1 hit, if the Bit Register shows it still unread;
//   4. else nothing (next_valid low): the caller then starts a new cluster
//      from the Priority Encoder.
// Rules 1 and 2 (CH+1 first, CH-1 only after the CH+ side is exhausted) and
// the return to the lower branch are the paper's. The single saved register,
// with no stack, and the bin order within a channel are this design's
// choices; a hit lost from the saved register is later read as a separate
// cluster. next_valid/next_id are combinational during clock (7); 'start'
// empties the saved register at the start of an event.
module next_hit_id_unit
  import ce_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [1:0]       blk,
  input  logic             en_up,
  input  logic             en_dn,
  input  logic             decide,
  input  hit_id_t          b_rdata [N_BLK],
  input  logic [N_BLK-1:0] sel_up,
  input  logic [N_BLK-1:0] sel_dn,
  input  logic [MAX_HITS-1:0] bits,
  output logic             next_valid,
  output hitnum_t          next_id
);
  hit_id_t up_q, dn_q, saved;

  function automatic hit_id_t pick(hit_id_t d [N_BLK], logic [N_BLK-1:0] sel,
                                   logic [1:0] c);
    logic [1:0] order [3];
    pick = '0;
    order[0] = c;
    order[1] = c + 2'd1;
    order[2] = c - 2'd1;
    for (int i = 2; i >= 0; i--)
      if (sel[order[i]] && d[order[i]].valid) pick = d[order[i]];
  endfunction

  always_ff @(posedge clk) begin
    if (rst || start) begin
      up_q  <= '0;
      dn_q  <= '0;
      saved <= '0;
    end else begin
      if (en_up) up_q <= pick(b_rdata, sel_up, blk);
      if (en_dn) dn_q <= pick(b_rdata, sel_dn, blk);
      if (decide) begin
        if (up_q.valid && dn_q.valid) saved <= dn_q;
        else if (!up_q.valid && !dn_q.valid) saved <= '0;
      end
    end
  end

  always_comb begin
    next_valid = 1'b1;
    if (up_q.valid)                          next_id = up_q.num;
    else if (dn_q.valid)                     next_id = dn_q.num;
    else if (saved.valid && bits[saved.num]) next_id = saved.num;
    else begin
      next_valid = 1'b0;
      next_id    = '0;
    end
  end
endmodule
