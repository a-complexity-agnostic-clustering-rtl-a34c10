// current_hit_valid_unit: decides whether the current hit is sent out as valid.
//
// At readout clock (5) the port-A read of the current hit's cell, addressed
// at clock (3) before the clear at (4), is on the Hit ID RAM output. The unit
// takes the word of block TM[9:8] and registers its valid bit, so cur_valid
// is available from clock (6) on and holds until the next slot's clock (6).
// The paper names the unit and places it between port A and the output; that
// it checks the valid bit is this design's reading of it. A hit whose cell a
// later hit of the same event overwrote (the paper rules such double hits
// out by choice of bin size) is flagged invalid.
module current_hit_valid_unit
  import ce_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       en,
  input  logic [1:0] blk,
  input  hit_id_t    a_rdata [N_BLK],
  output logic       cur_valid
);
  always_ff @(posedge clk) begin
    if (rst)     cur_valid <= 1'b0;
    else if (en) cur_valid <= a_rdata[blk].valid;
  end
endmodule
