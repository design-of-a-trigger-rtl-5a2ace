// Testbench for asd_pattern_gen: after bcid == pat_bcid at bc_phase 1, every enabled
// channel i must produce, in half-cycle samples, 8 highs, one low, then the 6 bits of
// charge i MSB first, then lows; disabled channels stay low; nothing happens when
// the generator is disabled.
`timescale 1ns/1ps
module tb_asd_pattern_gen;
  import tds_pkg::*;
  logic clk160 = 0, rst_n = 0, bcr = 0, enable = 0;
  logic [13:0] ch_en = '1, pat_a, pat_b;
  logic [11:0] bcid, pat_bcid = 12'd5;
  logic [1:0] bc_phase;
  int checks = 0, failures = 0;
  bit seq [14][$];

  bcid_counter u_bc (.clk160, .rst_n, .bcr, .bcid, .bc_phase);
  asd_pattern_gen dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk160)
    for (int i = 0; i < 14; i++) begin
      seq[i].push_back(pat_a[i]);
      seq[i].push_back(pat_b[i]);
    end

  initial begin
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      enable = (run != 1);
      ch_en  = (run == 2) ? 14'h1555 : '1;
      pat_bcid = bcid + 12'd3;
      for (int i = 0; i < 14; i++) seq[i].delete();
      repeat (40) @(posedge clk160);
      for (int i = 0; i < 14; i++) begin
        int st, n;
        bit exp_on;
        exp_on = enable && ch_en[i];
        st = -1;
        foreach (seq[i][k]) if (st < 0 && seq[i][k]) st = k;
        checks++;
        if (exp_on != (st >= 0)) begin failures++; $display("FAIL run %0d ch %0d start", run, i); end
        if (st >= 0) begin
          for (int h = 0; h < 20; h++) begin
            bit e;
            e = (h < 8) ? 1'b1 : (h == 8) ? 1'b0 : (h < 15) ? 1'((i >> (14 - h)) & 1) : 1'b0;
            checks++;
            if (seq[i][st+h] != e) begin failures++; $display("FAIL ch %0d h %0d", i, h); end
          end
          n = 0;
          foreach (seq[i][k]) n += seq[i][k];
          checks++;
          if (n != 8 + $countones(6'(i))) begin failures++; $display("FAIL ch %0d extra pulses", i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
