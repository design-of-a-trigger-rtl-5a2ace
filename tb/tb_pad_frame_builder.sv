// Testbench for pad_frame_builder: random 104 flags and BCIDs are loaded every 4
// cycles; the four frames that follow must be {1010, packet[115:90]} with hdr=1,
// then packet[89:60], [59:30], [29:0] with hdr=0, packet = {BCID, flags}.
`timescale 1ns/1ps
module tb_pad_frame_builder;
  import tds_pkg::*;
  logic clk160 = 0, rst_n = 0, load = 0;
  logic [103:0] flags = 0;
  logic [11:0] bcid = 0;
  logic [29:0] frame;
  logic hdr;
  int checks = 0, failures = 0;

  pad_frame_builder dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [115:0] pkt;
    logic [29:0] exp_f [4];
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      @(negedge clk160);
      for (int w = 0; w < 4; w++) flags[w*26 +: 26] = 26'($urandom);
      bcid = 12'($urandom);
      pkt  = {bcid, flags};
      exp_f[0] = {4'b1010, pkt[115:90]};
      exp_f[1] = pkt[89:60];
      exp_f[2] = pkt[59:30];
      exp_f[3] = pkt[29:0];
      load = 1;
      @(negedge clk160) load = 0;
      for (int k = 0; k < 4; k++) begin
        @(negedge clk160);
        checks++;
        if (frame != exp_f[k] || hdr != (k == 0)) begin
          failures++; $display("FAIL p=%0d k=%0d", p, k);
        end
        if (k == 2) load = 1;       // next packet right after frame 3
      end
      load = 0;
      // that load belongs to the next iteration: undo by re-syncing
      @(negedge clk160);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
