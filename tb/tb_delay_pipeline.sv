// tb_delay_pipeline: random 48-bit words in, each must come out exactly six
// clocks later.
`timescale 1ns/1ps
module tb_delay_pipeline;
  logic clk = 0;
  logic [47:0] din = 0, dout;
  logic [47:0] hist [$];
  int checks = 0, failures = 0;

  delay_pipeline #(.DEPTH(6), .WIDTH(48)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      din = {$urandom, 16'($urandom)};
      hist.push_back(din);
      @(posedge clk); #1;
      if (t >= 5) begin
        checks++;
        if (dout !== hist[t - 5]) begin
          failures++;
          $display("FAIL t=%0d got %h exp %h", t, dout, hist[t - 5]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
