// Testbench for pad_tds (all 104 channels) with the bcid_counter.
// Part 1: every channel fires at random times with a random delay-compensation
// setting; a per-channel reference model of the sampling grid gives each hit's
// compensated BCID. Every BC, the flags for the BC under test (BCID-2) must equal
// the set of channels with a hit tagged with that BCID, and the next four frames
// must carry {1010, BCID, flags} as 26 + 3 x 30 bits.
// Part 2 (the paper's compensation test): all channels fire together, but channels
// 52..103 arrive 3 ns later, just across a BC boundary. Without compensation they
// land in the next BC; with a one-slot (3.125 ns) shift on them all land in one BC.
`timescale 1ns/1ps
module tb_pad_tds;
  import tds_pkg::*;
  localparam int N = 104;
  logic clk160 = 0, rst_n = 0, bcr = 0;
  logic [11:0] bcid;
  logic [1:0] bc_phase;
  logic [N-1:0] tot = '0, flags;
  logic [2:0] phase_shift [N];
  logic [7:0] timeout = 8'd10;   // NULL push after 10 idle BCs
  logic [29:0] frame;
  logic hdr;
  int checks = 0, failures = 0, n_yes = 0, n_shifted = 0;
  bit part2 = 0;
  logic [11:0] lab_b;  logic [1:0] lab_p;
  logic [N-1:0] prev = '0;
  bit expd [int][int];     // expd[bcid][ch]
  logic [11:0] last_ref;
  logic [115:0] pq [$];
  bit have_ref = 0;

  bcid_counter u_bc (.clk160, .rst_n, .bcr, .bcid, .bc_phase);
  pad_tds dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ref_sample(input logic [N-1:0] s, input logic half);
    for (int ch = 0; ch < N; ch++)
      if (s[ch] && !prev[ch] && rst_n) begin
        logic [2:0] slot;
        logic [11:0] b;
        slot = {lab_p, half};
        b = (slot < phase_shift[ch]) ? lab_b - 1'b1 : lab_b;
        if (slot < phase_shift[ch]) n_shifted++;
        expd[int'(b)][ch] = 1;
      end
    prev = s;
  endtask
  always @(posedge clk160) begin
    lab_b = bcid; lab_p = bc_phase;
    ref_sample(tot, 1'b0);
  end
  always @(negedge clk160) ref_sample(tot, 1'b1);

  // flags check, just after the compare edge
  always @(posedge clk160) if (rst_n && bc_phase == 2'd2) begin
    logic [11:0] r;
    r = bcid - 12'd2;
    #0.5;
    if (!part2 && (have_ref || r > 3)) begin
      logic [N-1:0] e;
      e = '0;
      if (expd.exists(int'(r))) foreach (expd[int'(r)][ch]) e[ch] = 1;
      checks++;
      if (flags != e) begin failures++; $display("FAIL flags bcid %0d got %h exp %h", r, flags, e); end
      n_yes += $countones(flags);
      last_ref = r; have_ref = 1;
      pq.push_back({r, flags});
      expd.delete(int'(r));   // the BCID comes round again after 4096 BCs
    end
  end

  // part 2: largest number of YES flags the design reports in one BC
  int maxpop = 0;
  always @(posedge clk160) if (part2 && bc_phase == 2'd2) begin
    #0.5;
    if ($countones(flags) > maxpop) maxpop = $countones(flags);
  end

  // frame check: hdr marks frame 0 of a group
  logic [29:0] fr [4];
  int fk = -1;
  always @(negedge clk160) if (rst_n && have_ref && !part2) begin
    if (hdr) fk = 0;
    if (fk >= 0) begin
      fr[fk] = frame;
      fk++;
      if (fk == 4) begin
        logic [115:0] pkt;
        fk = -1;
        pkt = {fr[0][25:0], fr[1], fr[2], fr[3]};
        checks++;
        if (pq.size() == 0 || fr[0][29:26] != 4'b1010 || pkt != pq.pop_front()) begin
          failures++; $display("FAIL frame for bcid %0d", last_ref);
        end
      end
    end
  end

  for (genvar ch = 0; ch < N; ch++) begin : g_drv
    initial begin
      phase_shift[ch] = 3'($urandom);
      @(posedge rst_n);
      repeat (20) begin
        repeat ($urandom_range(16, 40)) @(posedge clk160);
        #(0.1 + 0.2 * $urandom_range(0, 29));
        tot[ch] = 1;
        repeat ($urandom_range(2, 6)) @(posedge clk160);
        #0.1 tot[ch] = 0;
      end
    end
  end

  // part 2 helper: fire all channels, late ones 3 ns later; returns set of BCIDs seen
  task automatic fire_all(output int nb0, output int nb1, output logic [11:0] b0);
    logic [11:0] first_b;
    expd.delete();
    // align: 1 ns before the end of a BC as seen by the sampling grid
    @(posedge clk160 iff bc_phase == 2'd2);
    #8.5;
    tot[51:0] = '1;
    #3.0 tot[N-1:52] = '1;
    repeat (4) @(posedge clk160);
    #0.1 tot = '0;
    repeat (16) @(posedge clk160);
    nb0 = 0; nb1 = 0; b0 = 0;
    foreach (expd[b]) begin
      if (nb0 == 0) begin b0 = 12'(b); nb0 = expd[b].num(); end
      else nb1 += expd[b].num();
    end
  endtask

  initial begin
    int a0, a1, c0, c1;
    logic [11:0] b;
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    #60000;
    part2 = 1;
    have_ref = 0;
    pq.delete();
    foreach (phase_shift[ch]) phase_shift[ch] = 0;
    maxpop = 0;
    fire_all(a0, a1, b);
    checks++;
    if (maxpop != 52) begin failures++; $display("FAIL design flags %0d in one BC, expected 52", maxpop); end
    $display("no compensation: %0d channels in BCID %0d, %0d in the next", a0, b, a1);
    checks++;
    if (!(a0 == 52 && a1 == 52)) begin failures++; $display("FAIL split expected"); end
    for (int ch = 52; ch < N; ch++) phase_shift[ch] = 3'd1;
    maxpop = 0;
    fire_all(c0, c1, b);
    checks++;
    if (maxpop != 104) begin failures++; $display("FAIL design flags %0d in one BC, expected 104", maxpop); end
    $display("compensated: %0d channels in BCID %0d, %0d elsewhere", c0, b, c1);
    checks++;
    if (!(c0 == 104 && c1 == 0)) begin failures++; $display("FAIL compensation"); end
    checks++;
    if (n_yes < 500 || n_shifted < 100) begin failures++; $display("FAIL coverage %0d %0d", n_yes, n_shifted); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
