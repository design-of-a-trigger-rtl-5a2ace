// Testbench for pad_ring_buffer: random hits, BC ticks and compare strobes against a
// two-entry reference buffer with a NULL timer kept in the testbench. Checks the flag
// after every compare, and that both YES and NO, hits in the older slot and NULL
// pushes all occur.
`timescale 1ns/1ps
module tb_pad_ring_buffer;
  logic clk160 = 0, rst_n = 0;
  logic hit = 0, bc_tick = 0, cmp = 0;
  logic [11:0] hit_bcid = 0, ref_bcid = 0;
  logic [7:0] timeout = 8'd5;
  logic flag;
  int checks = 0, failures = 0;
  int yes = 0, older = 0, nulls = 0;
  // reference
  logic v0 = 0, v1 = 0;  logic [11:0] b0 = 0, b1 = 0;
  int tmr = 0;
  logic exp_flag = 0;

  pad_ring_buffer dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk160);
      if (c > 0 && cmp) begin
        // flag registered at the previous edge
      end
      hit      = ($urandom_range(0, 9) == 0);
      hit_bcid = 12'($urandom_range(0, 7));
      bc_tick  = (c % 4 == 0);
      cmp      = (c % 4 == 1);
      ref_bcid = 12'($urandom_range(0, 7));
      timeout  = (c < 10000) ? 8'd5 : 8'd0;
      @(posedge clk160);
      // reference update with the values present at this edge
      if (cmp) begin
        exp_flag = (v0 && b0 == ref_bcid) || (v1 && b1 == ref_bcid);
        if (exp_flag) yes++;
        if (v1 && b1 == ref_bcid && !(v0 && b0 == ref_bcid)) older++;
      end
      if (hit || (!hit && bc_tick && timeout != 0 && tmr + 1 >= timeout)) begin
        if (!hit) nulls++;
        v1 = v0; b1 = b0; v0 = hit; b0 = hit_bcid; tmr = 0;
      end else if (bc_tick && tmr != 255) tmr++;
      #0.5;
      if (cmp) begin
        checks++;
        if (flag !== exp_flag) begin failures++; $display("FAIL c=%0d flag=%0d exp=%0d", c, flag, exp_flag); end
      end
    end
    checks++;
    if (yes < 100 || older < 20 || nulls < 20) begin
      failures++; $display("FAIL coverage yes=%0d older=%0d nulls=%0d", yes, older, nulls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
