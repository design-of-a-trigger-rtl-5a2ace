// Testbench for strip_enable_encoder: for random and corner bands (including the
// paper's example 10..26) the enable vector must have ones exactly on first..last.
`timescale 1ns/1ps
module tb_strip_enable_encoder;
  logic clk160 = 0, rst_n = 0;
  logic [6:0] first = 0, last = 0;
  logic [127:0] enable;
  int checks = 0, failures = 0;

  strip_enable_encoder dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      logic [127:0] e;
      @(negedge clk160);
      case (t)
        0: begin first = 10; last = 26; end
        1: begin first = 0; last = 127; end
        2: begin first = 111; last = 127; end
        3: begin first = 50; last = 40; end
        default: begin first = 7'($urandom); last = first + 7'($urandom_range(0, 16)); end
      endcase
      e = '0;
      for (int i = 0; i < 128; i++) if (i >= first && i <= last) e[i] = 1;
      @(negedge clk160);
      checks++;
      if (enable != e) begin failures++; $display("FAIL %0d..%0d", first, last); end
      if (t == 0 && enable != {101'b0, 17'h1ffff, 10'b0}) begin failures++; $display("FAIL paper example"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
