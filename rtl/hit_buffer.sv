// hit_buffer: storage for every word of every hit of one event.
//
// Simple dual-port RAM of DEPTH words. The fill phase writes word w of hit n
// at address {n, w}. The readout presents an address at its clock (0) and
// finds the word on rdata at clock (2): the address and the output are both
// registered, as the paper's clock list gives (Hit ID at 0, CH and Time at the
// output at 2). Depth follows the paper (128 hits x 8 words); the 48-bit width
// is this design's choice of word format.
module hit_buffer #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 48
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [WIDTH-1:0] q1;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    q1    <= mem[raddr];
    rdata <= q1;
  end
endmodule
