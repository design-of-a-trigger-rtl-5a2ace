// Testbench for bcid_counter: checks the BCID and phase against a cycle count
// kept by the testbench, across BCR pulses and the 12-bit wrap.
`timescale 1ns/1ps
module tb_bcid_counter;
  logic clk160 = 0, rst_n = 0, bcr = 0;
  logic [11:0] bcid;
  logic [1:0] bc_phase;
  int checks = 0, failures = 0;
  int n;   // cycles since the last BCR (or reset)

  bcid_counter dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_now();
    checks++;
    if (bcid != 12'((n / 4) % 4096) || bc_phase != 2'(n % 4)) begin
      failures++;
      $display("FAIL n=%0d bcid=%0d phase=%0d", n, bcid, bc_phase);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    n = 1;
    @(posedge clk160); #0.1;
    for (int c = 0; c < 17000; c++) begin
      @(negedge clk160);
      check_now();
      if (c == 50 || c == 16500) bcr = 1; else bcr = 0;
      @(posedge clk160); #0.1;
      n = (c == 50 || c == 16500) ? 0 : n + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
