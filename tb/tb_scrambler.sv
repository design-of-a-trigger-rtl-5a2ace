// Testbench for scrambler: a bit-serial 1+x^39+x^58 descrambler in the testbench
// must recover the data from the scrambled words; headers (hdr=1, bits 29:26) must
// pass unchanged, and the scrambled bits must differ from the data.
`timescale 1ns/1ps
module tb_scrambler;
  logic clk160 = 0, rst_n = 0, hdr = 0;
  logic [29:0] din, dout;
  int checks = 0, failures = 0;
  logic [57:0] ds;          // descrambler state
  logic [29:0] sent [$];
  logic        sent_h [$];
  int diff = 0;

  scrambler dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk160);
    rst_n = 1;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk160);
      if (c > 0 && c < 599) begin
        logic [29:0] exp_d, got;
        logic eh;
        got   = dout;
        exp_d = sent.pop_front();
        eh    = sent_h.pop_front();
        if (eh) begin
          checks++;
          if (got[29:26] != exp_d[29:26]) begin failures++; $display("FAIL header"); end
        end
        for (int i = 29; i >= 0; i--) begin
          if (!(eh && i >= 26)) begin
            logic d;
            d  = got[i] ^ ds[38] ^ ds[57];
            ds = {ds[56:0], got[i]};
            if (c > 4) begin   // descrambler has synchronised after 58 bits
              checks++;
              if (d != exp_d[i]) failures++;
            end
            if (got[i] != exp_d[i]) diff++;
          end
        end
      end
      din = (c % 3 == 0) ? '0 : 30'($urandom);
      hdr = (c % 4 == 0);
      if (hdr) din[29:26] = 4'b1010;
      sent.push_back(din);
      sent_h.push_back(hdr);
    end
    checks++;
    if (diff < 1000) begin failures++; $display("FAIL output looks unscrambled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
