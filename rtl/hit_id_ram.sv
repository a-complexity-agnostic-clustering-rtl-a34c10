// hit_id_ram: the Time x Channel map of Hit IDs, as four dual-port RAM blocks.
//
// Block k holds the time bins with TM[9:8] = k; inside a block the address is
// {TM[14:10], CH[7:0]} and the word is a Hit ID {valid, Hit Number}. Four
// blocks let one port-B access reach three adjacent time bins at once.
//   Port A: one address for all blocks, a per-block write mask. It is written
//           during filling and, during readout, read and then cleared for the
//           current hit.
//   Port B: read-only, its own address per block, for the neighbour search.
// Reads have two clocks of latency (address in clock t, data in clock t+2),
// matching the paper's clock list (addressed at 3 and 4, read at 5 and 6).
// The block count and address split follow the paper; the read-only port B
// and the output register are this design's choices.
module hit_id_ram #(
  parameter int unsigned ADDR_W = 13,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned N_BLK  = 4
) (
  input  logic                  clk,
  // port A
  input  logic [ADDR_W-1:0]     a_addr,
  input  logic [N_BLK-1:0]      a_wmask,
  input  logic [DATA_W-1:0]     a_wdata,
  output logic [DATA_W-1:0]     a_rdata [N_BLK],
  // port B
  input  logic [ADDR_W-1:0]     b_addr  [N_BLK],
  output logic [DATA_W-1:0]     b_rdata [N_BLK]
);
  for (genvar k = 0; k < N_BLK; k++) begin : g_blk
    logic [DATA_W-1:0] mem [2**ADDR_W];
    logic [DATA_W-1:0] a_q1, b_q1;

    always_ff @(posedge clk) begin
      if (a_wmask[k]) mem[a_addr] <= a_wdata;
      a_q1       <= mem[a_addr];
      b_q1       <= mem[b_addr[k]];
      a_rdata[k] <= a_q1;
      b_rdata[k] <= b_q1;
    end
  end
endmodule
