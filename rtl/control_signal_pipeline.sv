// control_signal_pipeline: per-clock strobes of an 8-clock hit slot.
//
// The readout handles one hit per slot of DEPTH clocks. slot_start marks
// clock (0) of a slot and slot_active says whether the slot holds a hit. The
// pair is shifted down a one-hot register chain, so stage[k] is high during
// clock (k) of an active slot. Clocks 0..7 are those of the paper's readout
// sequence (Hit Buffer addressed at 0, Hit ID RAM at 3 and 4, Next Hit ID at
// 5, 6 and 7); clocks 8..15, during which the engine sends the hit's eight
// words out, are this design's output timing. Consecutive slots overlap in
// the chain. stage[0] is combinational from the inputs, the other stages are
// registered. The shift-register form is this design's choice.
module control_signal_pipeline #(
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             slot_start,
  input  logic             slot_active,
  output logic [DEPTH-1:0] stage
);
  logic [DEPTH-1:1] sr;

  always_ff @(posedge clk) begin
    if (rst) sr <= '0;
    else     sr <= {sr[DEPTH-2:1], slot_start & slot_active};
  end

  assign stage = {sr, slot_start & slot_active};
endmodule
