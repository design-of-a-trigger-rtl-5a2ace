// Testbench for the gbt_ser behavioural model: 30-bit words loaded at clk160 must
// appear on the serial line MSB first, one word per clk160 cycle, back to back.
`timescale 1ns/1ps
module tb_gbt_ser;
  logic clk160 = 0, clk_ser = 0, rst_n = 0;
  logic [29:0] din;
  logic sout;
  int checks = 0, failures = 0;
  logic [29:0] words [$];
  bit bits [$];

  gbt_ser dut (.*);
  always #0.104 clk_ser = ~clk_ser;
  always #3.120 clk160 = ~clk160;

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk_ser) if (rst_n) bits.push_back(sout);

  initial begin
    int start;
    din = '0;
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk160);
      din = (c == 0) ? 30'h2AAA_5555 : 30'($urandom);
      words.push_back(din);
    end
    @(negedge clk160); din = '0;
    repeat (4) @(posedge clk160);
    // find the first word
    start = -1;
    for (int s = 0; s + 30 <= bits.size() && start < 0; s++) begin
      logic [29:0] w;
      for (int i = 0; i < 30; i++) w[29-i] = bits[s+i];
      if (w == words[0]) start = s;
    end
    checks++;
    if (start < 0) begin failures++; $display("FAIL first word not found"); end
    else begin
      for (int k = 0; k < 200; k++) begin
        logic [29:0] w;
        for (int i = 0; i < 30; i++) w[29-i] = bits[start + 30*k + i];
        checks++;
        if (w != words[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
