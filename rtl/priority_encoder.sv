// priority_encoder: index of the highest set bit of the Bit Register.
//
// Gives the highest unread Hit Number, which the readout uses to start a new
// cluster. Purely combinational; 'any' is low when no bit is set (idx is then
// zero). The caller registers the result.
module priority_encoder #(
  parameter int unsigned N = 128
) (
  input  logic [N-1:0]         bits,
  output logic                 any,
  output logic [$clog2(N)-1:0] idx
);
  always_comb begin
    any = 1'b0;
    idx = '0;
    for (int i = 0; i < N; i++) begin
      if (bits[i]) begin
        any = 1'b1;
        idx = i[$clog2(N)-1:0];
      end
    end
  end
endmodule
