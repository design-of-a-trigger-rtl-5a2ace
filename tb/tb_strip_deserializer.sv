// Testbench for strip_deserializer: an ASD model drives OUT as in the paper's ASD
// timing figure (high from the peak, low for half a CK cycle after a rising edge,
// then D5..D0 on both edges). Peak times are random. A reference model finds the
// half-cycle sample that first sees OUT high and computes the BCID tag and the FLAG
// (clk160 cycle of the peak inside its BC < win_ext). Also checks the internal
// pattern input (use_pat).
`timescale 1ns/1ps
module tb_strip_deserializer;
  import tds_pkg::*;
  logic clk160 = 0, rst_n = 0, bcr = 0, out_line = 0;
  logic use_pat = 0, pat_a = 0, pat_b = 0;
  logic [11:0] bcid;
  logic [1:0] bc_phase;
  logic [2:0] win_ext = 0;
  logic valid;
  strip_unit_t unit;
  int checks = 0, failures = 0, flags_seen = 0;
  logic [11:0] lab_b;  logic [1:0] lab_p;
  logic prev = 0, armed = 1;
  strip_unit_t expq [$];
  logic [5:0] cur_q;

  bcid_counter u_bc (.clk160, .rst_n, .bcr, .bcid, .bc_phase);
  strip_deserializer dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ref_sample(input logic s);
    if (s && !prev && armed && rst_n && !use_pat) begin
      expq.push_back('{charge: cur_q, bcid: lab_b, flag: ({1'b0, lab_p} < win_ext)});
      armed = 0;
    end
    prev = s;
  endtask
  always @(posedge clk160) begin
    lab_b = bcid; lab_p = bc_phase;
    ref_sample(out_line);
  end
  always @(negedge clk160) ref_sample(out_line);

  always @(posedge clk160) if (valid && !use_pat) begin
    strip_unit_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected unit"); end
    else begin
      e = expq.pop_front();
      if (unit != e) begin failures++; $display("FAIL got %h exp %h", unit, e); end
      if (e.flag) flags_seen++;
    end
  end

  // One ASD hit with charge q.
  task automatic asd_hit(input logic [5:0] q);
    cur_q = q;
    armed = 1;
    @(posedge clk160);
    #(0.1 + 0.2 * $urandom_range(0, 29));
    out_line = 1;
    repeat ($urandom_range(3, 8)) @(posedge clk160);
    #0.3 out_line = 0;                 // low for half a cycle after a rising edge
    for (int b = 5; b >= 0; b--) begin
      @(clk160);
      #0.3 out_line = q[b];
    end
    @(clk160);
    #0.3 out_line = 0;
    repeat ($urandom_range(2, 10)) @(posedge clk160);
  endtask

  initial begin
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      win_ext = 3'($urandom_range(0, 4));
      asd_hit(6'($urandom));
    end
    // internal pattern path: pairs (first half, second half)
    use_pat = 1;
    begin
      bit w [20];
      int got_before;
      for (int h = 0; h < 20; h++) w[h] = (h < 8) ? 1 : (h == 8) ? 0 : (h < 15) ? 1'((6'd45 >> (14 - h)) & 1) : 0;
      got_before = checks;
      for (int c = 0; c < 10; c++) begin
        @(negedge clk160);
        pat_a = w[2*c]; pat_b = w[2*c+1];
      end
      @(negedge clk160); pat_a = 0; pat_b = 0;
    end
    repeat (4) @(posedge clk160);
    $display("TB_RESULT checks=%0d failures=%0d", checks + pat_checks, failures + pat_fail + int'(pat_checks != 1) + int'(expq.size() != 0) + int'(flags_seen < 20));
    $finish;
  end

  int pat_checks = 0, pat_fail = 0;
  always @(posedge clk160) if (valid && use_pat) begin
    pat_checks++;
    if (unit.charge != 6'd45) pat_fail++;
  end
endmodule
