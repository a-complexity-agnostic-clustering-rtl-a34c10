// tb_control_signal_pipeline: slot starts every 8 clocks, some inactive; the
// strobe of clock k must be high k clocks after an active start and nowhere
// else.
`timescale 1ns/1ps
module tb_control_signal_pipeline;
  logic clk = 0, rst = 1, slot_start = 0, slot_active = 0;
  logic [15:0] stage;
  bit act_hist [$];
  bit st_hist [$];
  int checks = 0, failures = 0;

  control_signal_pipeline #(.DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      slot_start  = (t % 8 == 0);
      slot_active = (t % 24 != 16);
      #1;
      st_hist.push_back(slot_start && slot_active);
      for (int k = 0; k < 16; k++) begin
        bit e;
        e = (t - k >= 0) ? st_hist[t - k] : 1'b0;
        checks++;
        if (stage[k] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d stage[%0d]=%b exp %b", t, k, stage[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
