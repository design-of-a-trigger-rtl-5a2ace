// Testbench for pad_trigger_if: the testbench acts as the pad trigger extractor and
// sends requests on en/d0/d1, one bit per clk320 edge (640 Mb/s), d12 first, back to
// back once per BC (8 clk320 cycles) and with gaps. Each request must come out once
// on trig_v in clk160 with BCID = d0[12:1] and band-phi = d1[12:0], within 3 clk160
// cycles of the falling en.
`timescale 1ns/1ps
module tb_pad_trigger_if;
  import tds_pkg::*;
  logic clk320 = 0, clk160 = 0, rst_n = 0, en = 0, d0 = 0, d1 = 0;
  logic trig_v;
  logic [11:0] trig_bcid;
  logic [12:0] trig_bandphi;
  int checks = 0, failures = 0, sent = 0;
  logic [24:0] expq [$];
  realtime t_end [$];

  pad_trigger_if dut (.*);
  always #1.5625 clk320 = ~clk320;
  always @(posedge clk320) clk160 <= ~clk160;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [11:0] b, input logic [12:0] bp);
    logic [12:0] w0;
    w0 = {b, 1'b0};
    // drive each bit 0.4 ns after an edge so that it is stable at the next edge
    @(negedge clk320); #0.4;
    en = 1; d0 = w0[12]; d1 = bp[12];
    for (int i = 11; i >= 0; i--) begin
      @(clk320); #0.4;
      d0 = w0[i]; d1 = bp[i];
    end
    @(clk320); #0.4;       // d0 seen by the falling edge? no: by the rising edge
    @(clk320); #0.4;
    en = 0;
    expq.push_back({b, bp});
    t_end.push_back($realtime);
    sent++;
  endtask

  always @(posedge clk160) if (trig_v && rst_n) begin
    logic [24:0] e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected"); end
    else begin
      realtime t0;
      e = expq.pop_front();
      t0 = t_end.pop_front();
      if ({trig_bcid, trig_bandphi} != e) begin
        failures++; $display("FAIL got %h/%h exp %h/%h", trig_bcid, trig_bandphi, e[24:13], e[12:0]);
      end
      checks++;
      if ($realtime - t0 > 3 * 6.25) begin failures++; $display("FAIL latency %0t", $realtime - t0); end
    end
  end

  initial begin
    repeat (4) @(posedge clk160);
    #1 rst_n = 1;
    repeat (4) @(posedge clk160);
    send(12'h123, 13'h0abc);
    for (int t = 0; t < 300; t++) begin
      send(12'($urandom), 13'($urandom));
      if (t % 5 == 0) repeat ($urandom_range(1, 20)) @(posedge clk320);
    end
    repeat (10) @(posedge clk160);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d lost", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
