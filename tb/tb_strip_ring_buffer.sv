// Testbench for strip_ring_buffer: random strip data units (random BCID near the
// trigger BCID, random FLAG) and random triggers against a 4-entry reference buffer
// in the testbench. After each `sample`, `match` and `charge` two cycles later must
// follow the rule: BCID == T, or FLAG and BCID == T+1, newest entry first. Also
// checks the NULL timer and that matches through the FLAG occur.
`timescale 1ns/1ps
module tb_strip_ring_buffer;
  import tds_pkg::*;
  logic clk160 = 0, rst_n = 0;
  logic wr = 0, bc_tick = 0, sample = 0;
  strip_unit_t unit = '0;
  logic [7:0] timeout = 8'd6;
  logic [11:0] trig_bcid = 0;
  logic match;
  logic [5:0] charge;
  int checks = 0, failures = 0, flag_hits = 0, hits = 0, nulls = 0;
  logic rv [4];  strip_unit_t ru [4];
  int tmr = 0;
  logic exp_m [$];  logic [5:0] exp_q [$];

  strip_ring_buffer dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (rv[i]) begin rv[i] = 0; ru[i] = '0; end
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int c = 0; c < 30000; c++) begin
      @(negedge clk160);
      wr = ($urandom_range(0, 5) == 0);
      unit = '{charge: 6'($urandom), bcid: 12'($urandom_range(100, 104)), flag: 1'($urandom)};
      bc_tick = (c % 4 == 0);
      sample = ($urandom_range(0, 3) == 0);
      trig_bcid = 12'($urandom_range(99, 104));
      timeout = (c < 15000) ? 8'd6 : 8'd0;
      @(posedge clk160);
      if (sample) begin
        logic m; logic [5:0] q; bit via_flag;
        m = 0; q = 0; via_flag = 0;
        for (int i = 3; i >= 0; i--)
          if (rv[i] && (ru[i].bcid == trig_bcid || (ru[i].flag && ru[i].bcid == trig_bcid + 1))) begin
            m = 1; q = ru[i].charge; via_flag = (ru[i].bcid != trig_bcid);
          end
        if (m) hits++;
        if (m && via_flag) flag_hits++;
        exp_m.push_back(m); exp_q.push_back(q);
      end else begin
        exp_m.push_back(0); exp_q.push_back(0);
      end
      if (wr || (bc_tick && timeout != 0 && tmr + 1 >= timeout)) begin
        if (!wr) nulls++;
        for (int i = 3; i > 0; i--) begin rv[i] = rv[i-1]; ru[i] = ru[i-1]; end
        rv[0] = wr; ru[0] = unit; tmr = 0;
      end else if (bc_tick && tmr != 255) tmr++;
      if (exp_m.size() > 1) begin
        logic em; logic [5:0] eq;
        em = exp_m.pop_front(); eq = exp_q.pop_front();
        #0.5;
        checks++;
        if (match != em || (em && charge != eq)) begin
          failures++; $display("FAIL c=%0d m=%0d/%0d q=%0d/%0d", c, match, em, charge, eq);
        end
      end
    end
    checks++;
    if (hits < 500 || flag_hits < 100 || nulls < 30) begin
      failures++; $display("FAIL coverage %0d %0d %0d", hits, flag_hits, nulls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
