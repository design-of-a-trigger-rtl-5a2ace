// Testbench for strip_tds (128 channels) with the bcid_counter.
// Normal mode, after the paper's strip test: every channel gets a hit whose charge is
// the low six bits of its channel number, all in one BC; channels 0..63 peak early in
// their BC (FLAG set when the window is longer than 25 ns). Then four triggers one
// BC apart with trigger BCIDs X-1, X, X+1, X+2 ask for bands that cover all 128
// strips. A reference model (band LUT, match rule, 14-of-17 choice, packing) predicts
// every data frame group. With a 25 ns window only trigger X finds charges; with
// 50 ns trigger X-1 also finds the flagged strips. BCs without trigger must be NULL.
// Also: trigger-to-frame latency (9 clk160 edges from trig_v to frame 0, counted
// here from the falling edge that raises trig_v to the one that sees frame 0: 10), Global-Test (pattern generator + internal trigger),
// Bypass-Trigger (one channel, no trigger) and Frame-Gen training frames.
`timescale 1ns/1ps
module tb_strip_tds;
  import tds_pkg::*;
  logic clk160 = 0, rst_n = 0, bcr = 0;
  logic [11:0] bcid;
  logic [1:0] bc_phase;
  logic [127:0] asd_out = '0;
  strip_cfg_t cfg;
  logic trig_v = 0;
  logic [11:0] trig_bcid = 0;
  logic [12:0] trig_bandphi = 0;
  logic [2:0] lut_wr_mask = 0;
  logic [7:0] lut_wr_addr = 0;
  logic [6:0] lut_wr_first = 0, lut_wr_last = 0;
  logic [29:0] frame;
  logic data_frame, trig_accepted;
  int checks = 0, failures = 0;
  int n_data = 0, n_null = 0, n_match_strips = 0, n_flag_matches = 0, n_first14 = 0, n_last14 = 0;
  int n_fg = 0, n_glob = 0, n_byp = 0;

  bcid_counter u_bc (.clk160, .rst_n, .bcr, .bcid, .bc_phase);
  strip_tds dut (.*);
  always #3.125 clk160 = ~clk160;

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- LUT model: band b -> strips 8*b-? (covering 0..127 with 17-strip bands)
  logic [6:0] lf [256], ll [256];
  function automatic logic [6:0] band_first(int b); return 7'((b * 17) % 128); endfunction

  // ---------------- ASD model and hit reference
  logic [5:0]  hq [128];
  logic [11:0] htag [128];
  logic        hflag [128];
  logic        hval [128];
  real         hdelay [128];
  event fire;
  logic [11:0] lab_b;  logic [1:0] lab_p;
  logic [127:0] prev = '0;
  always @(posedge clk160) begin lab_b = bcid; lab_p = bc_phase; end
  task automatic ref_sample();
    for (int ch = 0; ch < 128; ch++)
      if (asd_out[ch] && !prev[ch] && !hval[ch]) begin
        hval[ch] = 1; htag[ch] = lab_b; hflag[ch] = ({1'b0, lab_p} < cfg.win_ext);
      end
    prev = asd_out;
  endtask
  always @(posedge clk160) #0 ref_sample();
  always @(negedge clk160) ref_sample();

  for (genvar ch = 0; ch < 128; ch++) begin : g_asd
    initial forever begin
      @(fire);
      #(hdelay[ch]);
      asd_out[ch] = 1;
      repeat (4) @(posedge clk160);
      #0.3 asd_out[ch] = 0;
      for (int b = 5; b >= 0; b--) begin
        @(clk160);
        #0.3 asd_out[ch] = hq[ch][b];
      end
      @(clk160);
      #0.3 asd_out[ch] = 0;
    end
  end

  // ---------------- frame group collector
  logic [103:0] pay;  logic [3:0] ghdr;
  logic [103:0] grp_pay [$];  logic grp_data [$];  int grp_time [$];
  int cyc = 0;
  always @(negedge clk160) begin
    int k;
    cyc++;
    k = (int'(bc_phase) + 3) % 4;
    if (k == 0) ghdr = frame[29:26];
    pay[103 - 26*k -: 26] = frame[25:0];
    if (k == 3 && cyc > 20) begin
      grp_pay.push_back(pay); grp_data.push_back(ghdr == 4'b1010); grp_time.push_back(cyc - 3);
      checks++;
      if (ghdr != 4'b1010 && ghdr != 4'b0110) begin failures++; $display("FAIL header %b", ghdr); end
      if (ghdr == 4'b0110) begin
        n_null++;
        checks++;
        if (pay != 0) begin failures++; $display("FAIL NULL payload"); end
      end
    end
  end

  function automatic logic [103:0] expect_pay(logic [11:0] t, logic [12:0] bp);
    logic [103:0] e;
    logic m [17];  logic [5:0] q [17];
    int f, l;  bit f14;
    f = lf[bp[12:5]]; l = ll[bp[12:5]];
    for (int i = 0; i < 17; i++) begin
      int ch;
      ch = f + i;
      m[i] = 0; q[i] = 0;
      if (ch <= l && ch < 128 && hval[ch] &&
          (htag[ch] == t || (hflag[ch] && htag[ch] == t + 1))) begin
        m[i] = 1; q[i] = hq[ch];
      end
    end
    f14 = m[1];
    e = '0;
    e[5:0] = t[5:0]; e[18:6] = bp; e[19] = f14;
    for (int k = 0; k < 14; k++) e[20 + 6*k +: 6] = m[k + (f14 ? 0 : 3)] ? q[k + (f14 ? 0 : 3)] : 6'd0;
    return e;
  endfunction

  task automatic lut_write(input int b, input logic [6:0] f, input logic [6:0] l);
    @(negedge clk160);
    lut_wr_mask = 3'b111; lut_wr_addr = 8'(b); lut_wr_first = f; lut_wr_last = l;
    lf[b] = f; ll[b] = l;
    @(negedge clk160) lut_wr_mask = 0;
  endtask

  // one round of the paper's test: hits at BCID x, triggers x-1..x+2
  task automatic strip_round(input logic [2:0] wext, input int band0);
    logic [11:0] x;
    logic [11:0] tb_q [$];  logic [12:0] bp_q [$];  int tt_q [$];
    int tstart;
    cfg.win_ext = wext;
    foreach (hval[ch]) hval[ch] = 0;
    // align to the sampling grid: peaks of channels 0..63 in the first cycle of a BC,
    // the others in the third
    @(posedge clk160 iff bc_phase == 2'd3);
    x = bcid + 12'd1;
    foreach (hdelay[ch]) hdelay[ch] = (ch < 64) ? 6.25 + 0.7 : 6.25 + 12.5 + 0.7;
    foreach (hq[ch]) hq[ch] = 6'(ch);
    #1;
    ->fire;
    repeat (40) @(posedge clk160);
    // four consecutive triggers, one per BC, covering bands band0..band0+3
    tstart = grp_pay.size();
    for (int k = 0; k < 4; k++) begin
      @(negedge clk160 iff bc_phase == 2'd0);
      trig_v = 1; trig_bcid = x - 12'd1 + 12'(k); trig_bandphi = {8'(band0 + k), 5'($urandom)};
      tb_q.push_back(trig_bcid); bp_q.push_back(trig_bandphi); tt_q.push_back(cyc);
      @(negedge clk160) trig_v = 0;
    end
    repeat (40) @(posedge clk160);
    // find the data groups after tstart, in order
    for (int g = tstart; g < grp_pay.size(); g++) if (grp_data[g]) begin
      logic [103:0] e;
      e = expect_pay(tb_q[0], bp_q[0]);
      checks++;
      if (grp_pay[g] != e) begin failures++; $display("FAIL data T=%0d bp=%h got %h exp %h", tb_q[0], bp_q[0], grp_pay[g], e); end
      checks++;
      if (g == tstart + 1 || grp_time[g] - tt_q[0] != 10) $display("trigger-to-frame latency %0d cycles", grp_time[g] - tt_q[0]);
      if (grp_time[g] - tt_q[0] != 10) begin failures++; $display("FAIL latency %0d cycles", grp_time[g] - tt_q[0]); end
      n_data++;
      if (e[19]) n_first14++; else n_last14++;
      for (int k = 0; k < 14; k++) if (e[20 + 6*k +: 6] != 0) n_match_strips++;
      if (tb_q[0] == x - 1 && e[103:20] != 0) n_flag_matches++;
      void'(tb_q.pop_front()); void'(bp_q.pop_front()); void'(tt_q.pop_front());
      if (tb_q.size() == 0) break;
    end
    checks++;
    if (tb_q.size() != 0) begin failures++; $display("FAIL %0d trigger packets missing", tb_q.size()); end
  endtask

  initial begin
    cfg = '0;
    cfg.timeout = 8'd200;
    foreach (hval[ch]) hval[ch] = 0;
    repeat (3) @(posedge clk160);
    #1 rst_n = 1;
    for (int b = 0; b < 256; b++) begin
      logic [6:0] f;
      f = band_first(b);
      lut_write(b, f, (int'(f) + 16 > 127) ? 7'd127 : f + 7'd16);
    end
    // 25 ns window, then 50 ns window (as in the paper's two test cases)
    for (int r = 0; r < 2; r++) strip_round(3'd0, 8 * r);
    for (int r = 0; r < 2; r++) strip_round(3'd4, 2 + 8 * r);
    strip_round(3'd2, 5);
    // ---- Global-Test: pattern generator on channels 0..13, internal trigger
    begin
      int g0;
      cfg.test_mode = TM_GLOBAL; cfg.pat_en = '1; cfg.win_ext = 0;
      cfg.int_bandphi = {8'd200, 5'd0};
      lut_write(200, 7'd0, 7'd16);
      cfg.trig_delay = 4'd5;
      cfg.pat_bcid = bcid + 12'd10;
      g0 = grp_pay.size();
      repeat (100) @(posedge clk160);
      for (int g = g0; g < grp_pay.size(); g++) if (grp_data[g]) begin
        // strips 0..13 carry charges 0..13; strip 1 fired -> first 14
        logic [103:0] e;
        e = '0; e[5:0] = cfg.pat_bcid[5:0]; e[18:6] = cfg.int_bandphi; e[19] = 1;
        for (int k = 0; k < 14; k++) e[20 + 6*k +: 6] = 6'(k);
        checks++; n_glob++;
        if (grp_pay[g] != e) begin failures++; $display("FAIL global test got %h exp %h", grp_pay[g], e); end
      end
      checks++;
      if (n_glob != 1) begin failures++; $display("FAIL global test groups %0d", n_glob); end
    end
    // ---- Bypass-Trigger: channel 40 alone, no trigger
    begin
      int g0;
      cfg.test_mode = TM_BYPASS; cfg.bypass_ch = 7'd40;
      g0 = grp_pay.size();
      foreach (hdelay[ch]) hdelay[ch] = 1.1;
      foreach (hq[ch]) hq[ch] = 6'(ch + 5);
      @(posedge clk160);
      ->fire;
      repeat (60) @(posedge clk160);
      for (int g = g0; g < grp_pay.size(); g++) if (grp_data[g]) begin
        n_byp++;
        checks++;
        // band starts at 39; channel 40 is strip 1 -> first 14, strip 1 = charge 45
        if (grp_pay[g][19] != 1 || grp_pay[g][26 +: 6] != 6'd45 ||
            grp_pay[g][103:32] != 0 || grp_pay[g][25:20] != 0) begin
          failures++; $display("FAIL bypass payload %h", grp_pay[g]);
        end
      end
      checks++;
      if (n_byp != 1) begin failures++; $display("FAIL bypass groups %0d", n_byp); end
    end
    // ---- Frame Gen
    begin
      int g0;
      cfg.test_mode = TM_FRAME_GEN;
      g0 = grp_pay.size();
      repeat (40) @(posedge clk160);
      for (int g = g0 + 1; g < grp_pay.size(); g++) begin
        n_fg++;
        checks++;
        if (!grp_data[g] || grp_pay[g] != {8{grp_pay[g][12:0]}}) begin failures++; $display("FAIL frame gen"); end
      end
    end
    checks++;
    if (n_data < 20 || n_null < 20 || n_match_strips < 50 || n_flag_matches < 1 ||
        n_first14 < 1 || n_last14 < 1 || n_fg < 5) begin
      failures++;
      $display("FAIL coverage data=%0d null=%0d strips=%0d flag=%0d f14=%0d l14=%0d fg=%0d",
               n_data, n_null, n_match_strips, n_flag_matches, n_first14, n_last14, n_fg);
    end
    $display("data groups %0d, NULL groups %0d, matched strips %0d, FLAG matches %0d, first/last-14 %0d/%0d",
             n_data, n_null, n_match_strips, n_flag_matches, n_first14, n_last14);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
