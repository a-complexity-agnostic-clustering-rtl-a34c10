// tb_bit_register: random set and clear operations on the 128-bit Bit
// Register, checked every clock against a bit array kept by the testbench.
`timescale 1ns/1ps
module tb_bit_register;
  localparam int N = 128;
  logic clk = 0, rst = 1, set_en = 0, clr_en = 0;
  logic [6:0] set_idx = 0, clr_idx = 0;
  logic [N-1:0] bits;
  bit ref_bits [N];
  int checks = 0, failures = 0;

  bit_register #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ref_bits[i]) ref_bits[i] = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < N; i++) begin checks++; if (bits[i]) failures++; end
    repeat (2000) begin
      @(negedge clk);
      set_en = 1'($urandom); set_idx = 7'($urandom);
      clr_en = 1'($urandom); clr_idx = 7'($urandom);
      if (set_en && clr_en && set_idx == clr_idx) clr_en = 0;
      @(posedge clk);
      if (clr_en) ref_bits[clr_idx] = 0;
      if (set_en) ref_bits[set_idx] = 1;
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (bits[i] != ref_bits[i]) begin
          failures++;
          if (failures < 5) $display("FAIL bit %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
