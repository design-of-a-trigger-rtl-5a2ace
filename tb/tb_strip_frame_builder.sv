// Testbench for strip_frame_builder: random band strips are offered at random
// phases. Each must produce one group of four data frames (header 1010) starting at
// the next BC boundary, whose 104-bit payload decodes to BCID[5:0], band-phi, the
// select bit (1st top strip fired -> strips 0..13, else 3..16) and the 14 charges
// (zero for unmatched strips). BCs without a request carry NULL frames (header 0110,
// zero payload). Then checks the training frames of frame_gen.
`timescale 1ns/1ps
module tb_strip_frame_builder;
  import tds_pkg::*;
  logic clk160 = 0, rst_n = 0, bcr = 0, frame_gen = 0, in_v = 0;
  logic [11:0] bcid, in_bcid = 0;
  logic [1:0] bc_phase;
  logic [12:0] in_bandphi = 0;
  logic [16:0] in_match = 0;
  logic [5:0] in_charge [17];
  logic [29:0] frame;
  logic data_frame;
  int checks = 0, failures = 0, n_first = 0, n_last = 0, n_null = 0, n_data = 0, n_fg = 0;
  logic [103:0] expq [$];
  logic [103:0] pay;
  int fidx = -1;
  logic [3:0] ghdr;

  bcid_counter u_bc (.clk160, .rst_n, .bcr, .bcid, .bc_phase);
  strip_frame_builder dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Collect groups: frame k of a group is on `frame` in the cycle after bc_phase k,
  // so frame 0 is seen while bc_phase == 1.
  logic [11:0] fg_prev; bit fg_have = 0;
  int cyc = 0;
  always @(negedge clk160) if (rst_n && ++cyc > 8 && (cyc > 12 || bc_phase == 1)) begin
    int k;
    k = (int'(bc_phase) + 3) % 4;
    if (cyc <= 12) cyc = 13;
    if (k == 0) ghdr = frame[29:26];
    pay[103 - 26*k -: 26] = frame[25:0];
    checks++;
    if (frame[29:26] != ghdr || data_frame != (ghdr == 4'b1010)) begin failures++; $display("FAIL header mix"); end
    if (k == 3) begin
      if (ghdr == 4'b0110) begin
        n_null++;
        checks++;
        if (pay != 0) begin failures++; $display("FAIL null payload"); end
      end else if (ghdr == 4'b1010 && frame_gen) begin
        n_fg++;
        checks++;
        if (pay != {8{pay[12:0]}} || (fg_have && pay[12:0] != 13'(fg_prev + 1))) begin failures++; $display("FAIL frame gen"); end
        fg_prev = 12'(pay[12:0]); fg_have = 1;
      end else if (ghdr == 4'b1010) begin
        n_data++;
        checks++;
        if (expq.size() == 0 || pay != expq.pop_front()) begin failures++; $display("FAIL data payload"); end
      end else begin
        failures++; $display("FAIL bad header %b", ghdr);
      end
    end
  end

  initial begin
    foreach (in_charge[i]) in_charge[i] = 0;
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      logic [103:0] e;
      bit f14;
      repeat ($urandom_range(4, 12)) @(negedge clk160);
      in_bcid = 12'($urandom); in_bandphi = 13'($urandom);
      in_match = 17'($urandom);
      foreach (in_charge[i]) in_charge[i] = 6'($urandom);
      f14 = in_match[1];
      if (f14) n_first++; else n_last++;
      e = '0;
      e[5:0] = in_bcid[5:0]; e[18:6] = in_bandphi; e[19] = f14;
      for (int k = 0; k < 14; k++) e[20 + 6*k +: 6] = in_match[k + (f14 ? 0 : 3)] ? in_charge[k + (f14 ? 0 : 3)] : 6'd0;
      expq.push_back(e);
      in_v = 1;
      @(negedge clk160) in_v = 0;
    end
    repeat (12) @(negedge clk160);
    frame_gen = 1;
    repeat (80) @(negedge clk160);
    checks++;
    if (expq.size() != 0 || n_first < 50 || n_last < 50 || n_null < 50 || n_fg < 10) begin
      failures++; $display("FAIL counts q=%0d first=%0d last=%0d null=%0d fg=%0d", expq.size(), n_first, n_last, n_null, n_fg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
