// Testbench for strip_sequencer: selector outputs laid out as the 8-1 selectors
// leave them (strip lead+b on selector (lead+b) mod 17) must come out in band order
// two cycles later, for random leading strips and back-to-back inputs.
`timescale 1ns/1ps
module tb_strip_sequencer;
  logic clk160 = 0, rst_n = 0;
  logic [6:0] lead = 0;
  logic [16:0] in_match = 0, out_match;
  logic [5:0] in_charge [17], out_charge [17];
  int checks = 0, failures = 0;
  logic [6:0] leads [$];

  strip_sequencer dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (in_charge[i]) in_charge[i] = 0;
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int t = 0; t < 1002; t++) begin
      @(negedge clk160);
      if (leads.size() == 2) begin
        logic [6:0] l;
        l = leads.pop_front();
        for (int b = 0; b < 17; b++) begin
          checks++;
          // strip b of the band carries charge (lead+b) mod 64, match = bit0 of it
          if (out_charge[b] != 6'(l + b) || out_match[b] != 1'(l + b)) begin
            failures++; $display("FAIL lead %0d b %0d", l, b);
          end
        end
      end
      lead = (t == 0) ? 7'd18 : 7'($urandom);
      for (int b = 0; b < 17; b++) begin
        in_charge[(lead + b) % 17] = 6'(lead + b);
        in_match[(lead + b) % 17]  = 1'(lead + b);
      end
      leads.push_back(lead);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
