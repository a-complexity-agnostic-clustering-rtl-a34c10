// delay_pipeline: fixed-length register chain for the hit data words.
//
// The Hit Buffer output is delayed by DEPTH clocks so that the words of a hit
// leave the engine together with the valid flag worked out for that hit by
// the Current Hit Valid Unit. The paper names this block; its depth (6 clocks,
// set by the engine) is this design's own timing choice. DEPTH must be >= 1.
module delay_pipeline #(
  parameter int unsigned DEPTH = 6,
  parameter int unsigned WIDTH = 48
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] stage [DEPTH];

  always_ff @(posedge clk) begin
    stage[0] <= din;
    for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
  end

  assign dout = stage[DEPTH-1];
endmodule
