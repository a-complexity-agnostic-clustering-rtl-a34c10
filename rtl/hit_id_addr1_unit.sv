// hit_id_addr1_unit: drives port A of the Hit ID RAM (the paper's Hit ID Unit
// and ADDR1 Unit).
//
// Three users share port A, in this priority:
//   init   after reset the engine clears every cell: all four blocks are
//          written with zero at init_addr (this design's own start-up step);
//   fill   a hit header writes the Hit ID {1, Hit Number} at
//          {TM[14:10], CH} of block TM[9:8];
//   read   at readout clock (2) 'ld' captures TM and CH of the current hit
//          from the Hit Buffer output; the address is then held, the cell is
//          read at clock (3) and cleared at clock (4) when 'clr' is high.
// Outputs are combinational from the inputs and the captured position.
// cur_blk is TM[9:8] of the current hit, used to pick the port-A read data.
module hit_id_addr1_unit
  import ce_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   init_we,
  input  ram_addr_t              init_addr,
  input  logic                   fill_we,
  input  tm_t                    fill_tm,
  input  ch_t                    fill_ch,
  input  hitnum_t                fill_hitnum,
  input  logic                   ld,
  input  tm_t                    ld_tm,
  input  ch_t                    ld_ch,
  input  logic                   clr,
  output ram_addr_t              a_addr,
  output logic [N_BLK-1:0]       a_wmask,
  output hit_id_t                a_wdata,
  output logic [1:0]             cur_blk
);
  tm_t cur_tm;
  ch_t cur_ch;

  always_ff @(posedge clk) begin
    if (rst) begin
      cur_tm <= '0;
      cur_ch <= '0;
    end else if (ld) begin
      cur_tm <= ld_tm;
      cur_ch <= ld_ch;
    end
  end

  assign cur_blk = cur_tm[9:8];

  always_comb begin
    if (init_we) begin
      a_addr  = init_addr;
      a_wmask = '1;
      a_wdata = '0;
    end else if (fill_we) begin
      a_addr  = ram_addr(fill_tm[14:10], fill_ch);
      a_wmask = N_BLK'(1) << fill_tm[9:8];
      a_wdata = '{valid: 1'b1, num: fill_hitnum};
    end else begin
      a_addr  = ram_addr(cur_tm[14:10], cur_ch);
      a_wmask = clr ? N_BLK'(1) << cur_tm[9:8] : '0;
      a_wdata = '0;
    end
  end
endmodule
