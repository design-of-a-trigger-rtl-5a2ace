// End-to-end testbench of tds_top at its default sizes (104 pads, 128 strips).
// The testbench descrambles every 30-bit word sent to the serializer (frame 0 of
// each group keeps its 4-bit header unscrambled; in pad mode frames 1..3 are
// scrambled whole) and checks the serial line against those words.
//  1. Pad mode: groups of pads fire together; each group must appear as YES flags in
//     exactly one packet with the right BCID. Then the paper's delay-compensation
//     test: late channels fall into the next BC until their phase is shifted.
//     The NULL timer must have emptied buffers.
//  2. Mode switch to strip mode: hits on 128 strips (charge = channel number mod 64),
//     then four triggers one BC apart sent on the 640 Mb/s pad-trigger link; the
//     packets must carry the matched charges; BCs without trigger are NULL frames.
//     A 50 ns window makes the FLAG path match too.
//  3. Global-Test, Bypass-Trigger and Frame-Gen modes, 4. PRBS-31.
// Each mechanism is counted; one that never happens is a failure.
`timescale 1ns/1ps
module tb_tds_top;
  import tds_pkg::*;
  logic clk160 = 0, clk320 = 0, clk_ser = 0, rst_n = 0, mode = 0, bcr = 0;
  logic [127:0] asd_in = '0;
  logic trig_en = 0, trig_d0 = 0, trig_d1 = 0, prbs_en = 0;
  logic [2:0] pad_phase [N_PAD];
  logic [7:0] pad_timeout = 8'd12;
  strip_cfg_t strip_cfg;
  logic [2:0] lut_wr_mask = 0;
  logic [7:0] lut_wr_addr = 0;
  logic [6:0] lut_wr_first = 0, lut_wr_last = 0;
  logic [29:0] tx_word;
  logic ser_out;
  logic [11:0] bcid;
  logic [103:0] pad_flags;
  logic strip_data_frame, strip_trig;
  int checks = 0, failures = 0;
  // mechanism counters
  int m_pad_packets = 0, m_pad_yes = 0, m_comp = 0, m_null_push = 0, m_strip_data = 0,
      m_strip_null = 0, m_match = 0, m_flag = 0, m_first14 = 0, m_last14 = 0, m_glob = 0,
      m_byp = 0, m_fg = 0, m_prbs = 0, m_switch = 0, m_serial = 0, m_trig_link = 0;

  tds_top dut (.*);
  always #0.104 clk_ser = ~clk_ser;
  always #1.560 clk320 = ~clk320;
  always @(posedge clk320) clk160 <= ~clk160;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- descrambler and group collector
  logic [57:0] ds = '0;
  logic [29:0] plain;
  logic [29:0] grp [4];
  logic [29:0] words [$];     // tx words for the serial check
  bit collect_words = 0;
  typedef struct { logic [29:0] f [4]; logic m; } group_t;
  group_t groups [$];
  int k_now;
  always @(negedge clk160) if (rst_n) begin
    logic [29:0] w;
    bit h;
    k_now = (int'(dut.u_bcid.bc_phase) + 2) % 4;   // frame 0 is sent during bc_phase 2
    w = tx_word;
    if (collect_words) words.push_back(w);
    h = (k_now == 0) || mode;
    for (int i = 29; i >= 0; i--) begin
      if (h && i >= 26) plain[i] = w[i];
      else begin
        plain[i] = w[i] ^ ds[38] ^ ds[57];
        ds = {ds[56:0], w[i]};
      end
    end
    grp[k_now] = plain;
    if (k_now == 3 && !prbs_en) begin
      group_t g;
      g.f = grp; g.m = mode;
      groups.push_back(g);
    end
  end

  function automatic logic [115:0] pad_pkt(group_t g);
    return {g.f[0][25:0], g.f[1], g.f[2], g.f[3]};
  endfunction
  function automatic logic [103:0] strip_pay(group_t g);
    return {g.f[0][25:0], g.f[1][25:0], g.f[2][25:0], g.f[3][25:0]};
  endfunction

  // count NULL pushes of the pad ring buffers
  logic [N_PAD-1:0] push_null_v;
  for (genvar i = 0; i < N_PAD; i++) begin : g_np
    assign push_null_v[i] = dut.u_pad.g_ch[i].u_rb.push_null;
  end
  always @(posedge clk160) if (rst_n && !mode) m_null_push += $countones(push_null_v);

  // ---------------- pad trigger extractor model (640 Mb/s on d0/d1)
  task automatic send_trigger(input logic [11:0] b, input logic [12:0] bp);
    logic [12:0] w0;
    w0 = {b, 1'b0};
    @(negedge clk320); #0.4;
    trig_en = 1; trig_d0 = w0[12]; trig_d1 = bp[12];
    for (int i = 11; i >= 0; i--) begin
      @(clk320); #0.4;
      trig_d0 = w0[i]; trig_d1 = bp[i];
    end
    @(clk320); #0.4;
    @(clk320); #0.4;
    trig_en = 0;
    m_trig_link++;
  endtask

  // ---------------- ASD strip line model
  logic [5:0] hq [128];
  task automatic asd_strip(input int ch);
    asd_in[ch] = 1;
    repeat (4) @(posedge clk160);
    #0.3 asd_in[ch] = 0;
    for (int b = 5; b >= 0; b--) begin
      @(clk160);
      #0.3 asd_in[ch] = hq[ch][b];
    end
    @(clk160);
    #0.3 asd_in[ch] = 0;
  endtask

  // ----------------------------------------------------------------------------
  initial begin
    int g0;
    foreach (pad_phase[i]) pad_phase[i] = 0;
    strip_cfg = '0;
    strip_cfg.timeout = 8'd100;
    repeat (4) @(posedge clk160);
    #1 rst_n = 1;
    repeat (8) @(posedge clk160);

    // ======== 1. pad mode
    for (int ev = 0; ev < 12; ev++) begin
      logic [103:0] set;
      logic [11:0] b_at;
      int found;
      set = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk160 iff dut.u_bcid.bc_phase == 2'd0);
      b_at = bcid;                 // sampling grid: a pulse 2 ns after this edge
      #2.1 asd_in[103:0] = set;    // is in the BC labelled with this BCID
      repeat (3) @(posedge clk160);
      #0.1 asd_in = '0;
      g0 = groups.size();
      repeat (40) @(posedge clk160);
      found = 0;
      for (int g = g0; g < groups.size(); g++) if (!groups[g].m) begin
        logic [115:0] p;
        p = pad_pkt(groups[g]);
        m_pad_packets++;
        checks++;
        if (groups[g].f[0][29:26] != 4'b1010) begin failures++; $display("FAIL pad header"); end
        if (p[103:0] != 0) begin
          found++;
          checks++;
          if (p[103:0] != set || p[115:104] != b_at) begin
            failures++; $display("FAIL pad packet bcid %0d flags %h exp %0d %h", p[115:104], p[103:0], b_at, set);
          end
          m_pad_yes += $countones(p[103:0]);
        end
      end
      checks++;
      if (found != 1) begin failures++; $display("FAIL pad event seen in %0d packets", found); end
    end
    // delay compensation: channels 52..103 arrive 3 ns later, across the BC edge
    for (int pass = 0; pass < 2; pass++) begin
      int nz;
      for (int i = 52; i < N_PAD; i++) pad_phase[i] = 3'(pass);
      @(posedge clk160 iff dut.u_bcid.bc_phase == 2'd2);
      #8.5 asd_in[51:0] = '1;
      #3.0 asd_in[103:52] = '1;
      repeat (3) @(posedge clk160);
      #0.1 asd_in = '0;
      g0 = groups.size();
      repeat (40) @(posedge clk160);
      nz = 0;
      for (int g = g0; g < groups.size(); g++) begin
        logic [115:0] p;
        p = pad_pkt(groups[g]);
        if (p[103:0] != 0) begin
          nz++;
          checks++;
          if (pass == 0 && !(p[103:0] == {52'b0, {52{1'b1}}} || p[103:0] == {{52{1'b1}}, 52'b0})) begin
            failures++; $display("FAIL uncompensated split");
          end
          if (pass == 1 && p[103:0] != '1) begin failures++; $display("FAIL compensated packet"); end
          if (pass == 1 && p[103:0] == '1) m_comp++;
        end
      end
      checks++;
      if (nz != 2 - pass) begin failures++; $display("FAIL pass %0d packets with hits %0d", pass, nz); end
    end
    // serial line check over a window
    collect_words = 1;
    repeat (20) @(posedge clk160);
    collect_words = 0;

    // ======== 2. strip mode
    @(negedge clk160);
    mode = 1; m_switch++;
    repeat (8) @(posedge clk160);
    for (int b = 0; b < 8; b++) begin
      @(negedge clk160);
      lut_wr_mask = 3'b111; lut_wr_addr = 8'(b);
      lut_wr_first = 7'(b * 17); lut_wr_last = 7'((b * 17 + 16 > 127) ? 127 : b * 17 + 16);
    end
    @(negedge clk160) lut_wr_mask = 0;
    for (int r = 0; r < 2; r++) begin
      logic [11:0] x;
      int nd;
      strip_cfg.win_ext = (r == 0) ? 3'd0 : 3'd4;
      foreach (hq[ch]) hq[ch] = 6'(ch);
      @(posedge clk160 iff dut.u_bcid.bc_phase == 2'd3);
      x = bcid + 12'd1;          // peaks in the first cycle of BC x (FLAG when 50 ns)
      #7;
      for (int ch = 0; ch < 128; ch++) fork automatic int c = ch; asd_strip(c); join_none
      repeat (40) @(posedge clk160);
      g0 = groups.size();
      for (int t = 0; t < 4; t++) send_trigger(x - 12'd1 + 12'(t), {8'(2 * t + r), 5'd3});
      repeat (40) @(posedge clk160);
      nd = 0;
      for (int g = g0; g < groups.size(); g++) begin
        logic [103:0] p;
        p = strip_pay(groups[g]);
        if (groups[g].f[0][29:26] == 4'b0110) begin
          m_strip_null++;
          checks++;
          if (p != 0) begin failures++; $display("FAIL strip NULL payload"); end
        end else begin
          int t, band, base;
          logic [103:0] e;
          t = nd; nd++;
          band = 2 * t + r;
          m_strip_data++;
          // expected: matched when trigger BCID == x, or x-1 with the 50 ns window
          e = '0;
          e[5:0] = 6'(x - 1 + t); e[18:6] = {8'(band), 5'd3};
          if (t == 1 || (t == 0 && r == 1)) begin
            e[19] = 1;                       // 1st top strip fired -> first 14
            for (int k = 0; k < 14; k++) e[20 + 6*k +: 6] = (band * 17 + k < 128) ? 6'(band * 17 + k) : 6'd0;
            if (t == 0) m_flag++;
            m_match++;
            m_first14++;
          end else begin
            m_last14++;
          end
          checks++;
          if (groups[g].f[0][29:26] != 4'b1010 || p != e) begin
            failures++; $display("FAIL strip packet r=%0d t=%0d got %h exp %h", r, t, p, e);
          end
        end
      end
      checks++;
      if (nd != 4) begin failures++; $display("FAIL %0d strip data packets", nd); end
    end

    // ======== 3. test modes
    strip_cfg.test_mode = TM_GLOBAL; strip_cfg.pat_en = '1; strip_cfg.win_ext = 0;
    strip_cfg.int_bandphi = {8'd0, 5'd1}; strip_cfg.trig_delay = 4'd4;
    strip_cfg.pat_bcid = bcid + 12'd8;
    g0 = groups.size();
    repeat (80) @(posedge clk160);
    for (int g = g0; g < groups.size(); g++) if (groups[g].f[0][29:26] == 4'b1010) begin
      logic [103:0] p;
      p = strip_pay(groups[g]);
      m_glob++;
      checks++;
      for (int k = 0; k < 14; k++) if (p[20 + 6*k +: 6] != 6'(k)) begin failures++; $display("FAIL global strip %0d", k); break; end
    end
    strip_cfg.test_mode = TM_BYPASS; strip_cfg.bypass_ch = 7'd77;
    hq[77] = 6'd33;
    g0 = groups.size();
    repeat (2) @(posedge clk160);
    #1 asd_strip(77);
    repeat (40) @(posedge clk160);
    for (int g = g0; g < groups.size(); g++) if (groups[g].f[0][29:26] == 4'b1010) begin
      logic [103:0] p;
      p = strip_pay(groups[g]);
      m_byp++;
      checks++;
      if (p[26 +: 6] != 6'd33 || p[19] != 1) begin failures++; $display("FAIL bypass %h", p); end
    end
    strip_cfg.test_mode = TM_FRAME_GEN;
    g0 = groups.size();
    repeat (40) @(posedge clk160);
    for (int g = g0 + 2; g < groups.size(); g++) begin   // the new mode reaches the output after two BCs
      logic [103:0] p;
      p = strip_pay(groups[g]);
      m_fg++;
      checks++;
      if (groups[g].f[0][29:26] != 4'b1010 || p != {8{p[12:0]}}) begin failures++; $display("FAIL frame gen g=%0d of %0d hdr %b p %h", g - g0, groups.size() - g0, groups[g].f[0][29:26], p); end
    end

    // ======== 4. PRBS-31
    begin
      bit s [$];
      @(negedge clk160) prbs_en = 1;
      repeat (3) @(negedge clk160);
      for (int c = 0; c < 40; c++) begin
        @(negedge clk160);
        for (int i = 29; i >= 0; i--) s.push_back(tx_word[i]);
      end
      foreach (s[n]) if (n >= 31) begin
        checks++;
        if (s[n] != (s[n-31] ^ s[n-28])) failures++;
      end
      m_prbs = 1;
    end

    // ======== serial line: words collected in pad mode must be on ser_out
    begin
      int start;
      start = -1;
      for (int s0 = 0; s0 + 30 <= serial.size() && start < 0; s0++) begin
        logic [29:0] w;
        for (int i = 0; i < 30; i++) w[29-i] = serial[s0+i];
        if (w == words[0] && words[0] != 0) start = s0;
      end
      checks++;
      if (start < 0) begin failures++; $display("FAIL serial start"); end
      else for (int k = 0; k < words.size(); k++) begin
        logic [29:0] w;
        for (int i = 0; i < 30; i++) w[29-i] = serial[start + 30*k + i];
        checks++;
        if (w != words[k]) failures++; else m_serial++;
      end
    end

    $display("mechanisms: pad packets %0d, pad YES flags %0d, compensated events %0d, NULL pushes %0d",
             m_pad_packets, m_pad_yes, m_comp, m_null_push);
    $display("  strip data %0d, strip NULL groups %0d, matched triggers %0d (via FLAG %0d), first/last-14 %0d/%0d",
             m_strip_data, m_strip_null, m_match, m_flag, m_first14, m_last14);
    $display("  trigger link requests %0d, global-test %0d, bypass %0d, frame-gen %0d, prbs %0d, mode switches %0d, serial words %0d",
             m_trig_link, m_glob, m_byp, m_fg, m_prbs, m_switch, m_serial);
    if (m_pad_packets == 0 || m_pad_yes == 0 || m_comp == 0 || m_null_push == 0 || m_strip_data == 0 ||
        m_strip_null == 0 || m_match == 0 || m_flag == 0 || m_first14 == 0 || m_last14 == 0 ||
        m_glob == 0 || m_byp == 0 || m_fg == 0 || m_prbs == 0 || m_switch == 0 || m_serial == 0 ||
        m_trig_link == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // serial bits, sampled on clk_ser while words are collected
  bit serial [$];
  bit ser_on = 0;
  always @(posedge clk160) ser_on <= collect_words || (ser_on && serial.size() < 30 * 40);
  always @(posedge clk_ser) if (ser_on) serial.push_back(ser_out);
endmodule
