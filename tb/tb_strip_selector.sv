// Testbench for strip_selector: for random leading strips, selector j must output the
// match/charge of the band channel that is congruent to j modulo 17 (zero if that
// channel is above 127). Includes the paper's example: band 18..34 gives
// 34,18,19,..,33 on selectors 0..16.
`timescale 1ns/1ps
module tb_strip_selector;
  logic clk160 = 0, rst_n = 0;
  logic [6:0] lead = 0;
  logic [127:0] match = 0;
  logic [5:0] charge [128];
  logic [16:0] sel_match;
  logic [5:0] sel_charge [17];
  int checks = 0, failures = 0;

  strip_selector dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (charge[i]) charge[i] = 6'(i);
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk160);
      lead = (t == 0) ? 7'd18 : 7'($urandom);
      match = {$urandom, $urandom, $urandom, $urandom};
      foreach (charge[i]) charge[i] = (t == 0) ? 6'(i) : 6'($urandom);
      @(negedge clk160);
      for (int b = 0; b < 17; b++) begin
        int ch, j;
        ch = lead + b;
        j = ch % 17;
        checks++;
        if (ch < 128) begin
          if (sel_match[j] != match[ch] || sel_charge[j] != charge[ch]) begin
            failures++; $display("FAIL lead %0d strip %0d", lead, ch);
          end
        end else if (sel_match[j] != 0 || sel_charge[j] != 0) begin
          failures++; $display("FAIL lead %0d beyond 127", lead);
        end
      end
      if (t == 0) begin
        checks++;
        if (sel_charge[0] != 34 || sel_charge[1] != 18 || sel_charge[16] != 33) begin
          failures++; $display("FAIL paper example");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
