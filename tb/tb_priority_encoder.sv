// tb_priority_encoder: random and sparse 128-bit inputs; the expected index
// is found by scanning down from the top bit.
`timescale 1ns/1ps
module tb_priority_encoder;
  localparam int N = 128;
  logic [N-1:0] bits;
  logic any;
  logic [6:0] idx;
  int checks = 0, failures = 0;

  priority_encoder #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(logic [N-1:0] v);
    int e = -1;
    bits = v;
    #1;
    for (int i = N - 1; i >= 0; i--) if (v[i]) begin e = i; break; end
    checks++;
    if (any != (e >= 0) || (e >= 0 && int'(idx) != e)) begin
      failures++;
      $display("FAIL bits=%h any=%b idx=%0d expected %0d", v, any, idx, e);
    end
  endtask

  initial begin
    try('0);
    for (int i = 0; i < N; i++) try(N'(1) << i);
    repeat (500) try({$urandom, $urandom, $urandom, $urandom});
    repeat (500) try((N'(1) << $urandom_range(N - 1)) | (N'(1) << $urandom_range(N - 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
