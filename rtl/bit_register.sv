// bit_register: one flag per Hit Number of the event.
//
// A bit is set while the hit is filled and cleared when the readout takes the
// hit, so the set bits are the hits not yet sent out. Set and clear act on the
// next clock edge; a set and a clear of the same bit in one clock leave it set
// (they never coincide in the engine, fill and readout being separate phases).
// Reset clears every bit, which is this design's choice.
module bit_register #(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 set_en,
  input  logic [$clog2(N)-1:0] set_idx,
  input  logic                 clr_en,
  input  logic [$clog2(N)-1:0] clr_idx,
  output logic [N-1:0]         bits
);
  always_ff @(posedge clk) begin
    if (rst) begin
      bits <= '0;
    end else begin
      if (clr_en) bits[clr_idx] <= 1'b0;
      if (set_en) bits[set_idx] <= 1'b1;
    end
  end
endmodule
