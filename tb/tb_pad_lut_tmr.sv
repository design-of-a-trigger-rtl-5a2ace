// Testbench for pad_lut_tmr: random entries written to all copies read back one
// cycle later; an entry corrupted in one copy still reads correctly (majority
// vote); the same corruption in two copies wins.
`timescale 1ns/1ps
module tb_pad_lut_tmr;
  logic clk160 = 0, rst_n = 0;
  logic [2:0] wr_mask = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0;
  logic [6:0] wr_first = 0, wr_last = 0, first, last;
  int checks = 0, failures = 0;
  logic [13:0] model [256];

  pad_lut_tmr dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [2:0] m, input logic [7:0] a, input logic [13:0] d);
    @(negedge clk160);
    wr_mask = m; wr_addr = a; {wr_first, wr_last} = d;
    @(negedge clk160);
    wr_mask = 0;
  endtask

  task automatic rd_check(input logic [7:0] a, input logic [13:0] e);
    @(negedge clk160);
    rd_addr = a;
    @(negedge clk160);
    checks++;
    if ({first, last} != e) begin failures++; $display("FAIL addr %0d got %h exp %h", a, {first, last}, e); end
  endtask

  initial begin
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      model[a] = 14'($urandom);
      wr(3'b111, 8'(a), model[a]);
    end
    for (int a = 0; a < 256; a++) rd_check(8'(a), model[a]);
    for (int a = 0; a < 256; a += 3) begin
      wr(3'b001 << (a % 3), 8'(a), ~model[a]);   // single-copy upset
      rd_check(8'(a), model[a]);
    end
    for (int a = 1; a < 256; a += 5) begin
      wr(3'b011, 8'(a), ~model[a]);             // two copies
      rd_check(8'(a), ~model[a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
