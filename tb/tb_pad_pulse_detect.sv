// Testbench for pad_pulse_detect with the bcid_counter: TOT pulses are placed at
// random times (1 ns resolution) with random phase_shift settings. A reference model
// in the testbench finds the half-cycle sample that first sees each pulse high and
// computes its 3.125 ns slot and expected BCID: the slot's BCID, or one less when
// the slot lies before the channel's delayed BC boundary.
// Sample labelling: a sample at rising edge k+1 and the falling edge after it belong
// to the BC position the counter showed during cycle k (one cycle of pipeline).
`timescale 1ns/1ps
module tb_pad_pulse_detect;
  import tds_pkg::*;
  logic clk160 = 0, rst_n = 0, bcr = 0, tot = 0;
  logic [11:0] bcid, hit_bcid;
  logic [1:0] bc_phase;
  logic [2:0] phase_shift = 0;
  logic hit;
  int checks = 0, failures = 0;
  logic [11:0] lab_b;  logic [1:0] lab_p;
  logic prev = 0;
  logic [11:0] expq [$];
  int shifted = 0;

  bcid_counter u_bc (.clk160, .rst_n, .bcr, .bcid, .bc_phase);
  pad_pulse_detect dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model of the sampling grid
  task automatic ref_sample(input logic s, input logic half);
    if (s && !prev && rst_n) begin
      logic [2:0] slot;
      slot = {lab_p, half};
      expq.push_back(slot < phase_shift ? lab_b - 1'b1 : lab_b);
      if (slot < phase_shift) shifted++;
    end
    prev = s;
  endtask
  always @(posedge clk160) begin
    lab_b = bcid; lab_p = bc_phase;      // values of the cycle now ending
    ref_sample(tot, 1'b0);
  end
  always @(negedge clk160) ref_sample(tot, 1'b1);

  always @(posedge clk160) if (hit && rst_n) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected hit"); end
    else begin
      logic [11:0] e;
      e = expq.pop_front();
      if (hit_bcid != e) begin failures++; $display("FAIL bcid %0d exp %0d", hit_bcid, e); end
    end
  end

  initial begin
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      // change TOT only between clock edges (0.1 ns + k x 0.2 ns after a rising edge)
      repeat ($urandom_range(5, 12)) @(posedge clk160);
      phase_shift = 3'($urandom);
      #(0.1 + 0.2 * $urandom_range(0, 29));
      tot = 1;
      repeat ($urandom_range(1, 4)) @(posedge clk160);
      #(0.1 + 0.2 * $urandom_range(0, 29));
      tot = 0;
    end
    #100;
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d hits missing", expq.size()); end
    checks++;
    if (shifted < 20) begin failures++; $display("FAIL too few shifted hits"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
