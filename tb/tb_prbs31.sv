// Testbench for prbs31: the output stream must satisfy b[n] = b[n-31] ^ b[n-28]
// (the recurrence of x^31 + x^28 + 1), must not be constant, and must stop when en=0.
`timescale 1ns/1ps
module tb_prbs31;
  logic clk160 = 0, rst_n = 0, en = 0;
  logic [29:0] dout;
  int checks = 0, failures = 0;
  bit stream [$];
  int ones = 0;

  prbs31 dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk160);
    rst_n = 1;
    @(negedge clk160) en = 1;
    @(posedge clk160);
    for (int c = 0; c < 400; c++) begin
      @(negedge clk160);
      for (int i = 29; i >= 0; i--) stream.push_back(dout[i]);
      if (c == 200) begin
        logic [29:0] held;
        en = 0;
        @(posedge clk160); @(negedge clk160);
        held = dout;
        @(posedge clk160); @(negedge clk160);
        checks++;
        if (dout != held) begin failures++; $display("FAIL en=0 did not hold"); end
        en = 1;
        @(posedge clk160);
        stream.delete();
      end
    end
    foreach (stream[n]) begin
      if (n >= 31) begin
        checks++;
        if (stream[n] != (stream[n-31] ^ stream[n-28])) failures++;
      end
      ones += stream[n];
    end
    checks++;
    if (ones < stream.size()/3 || ones > 2*stream.size()/3) begin
      failures++; $display("FAIL balance %0d of %0d", ones, stream.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
