// strip_tds: strip-mode datapath of the TDS.
// Every strip channel has a strip_deserializer (ASD line -> charge, BCID, FLAG) and a
// strip_ring_buffer. A trigger (trigger BCID + band-phi ID) runs down a clk160
// pipeline whose stages follow the paper's latency budget:
//   cycle 1    band LUT (pad_lut_tmr)              } "find strips in ROI", 12.5 ns
//   cycle 2    thermal encoders + AND              }
//   cycle 3    sampling switches of enabled channels }
//   cycle 4    BCID comparison                       } "trigger matching", 18.75 ns
//   cycle 5    seventeen 8-1 selectors               }
//   cycle 6-7  strip sequencer                    "strip sequencer", 12.5 ns
//   cycle 8    14-of-17 selection and packing, then the next BC-aligned frame group
// Test modes (strip_cfg_t.test_mode):
//   TM_GLOBAL    the pattern generator drives channels 0..13 and an internal trigger
//                (BCID pat_bcid, band-phi int_bandphi) is made at BCID
//                pat_bcid + trig_delay; external triggers are ignored.
//   TM_BYPASS    each data unit of channel bypass_ch goes straight to the selectors
//                as a match (ring buffers and trigger units bypassed), with leading
//                strip bypass_ch-1 (0 for channel 0) and the unit's own BCID.
//   TM_FRAME_GEN training frames instead of trigger data.
// The internal trigger rule and the bypass band are this design's choices.
module strip_tds
  import tds_pkg::*;
(
  input  logic               clk160,
  input  logic               rst_n,
  input  logic [BCID_W-1:0]  bcid,
  input  logic [1:0]         bc_phase,
  input  logic [N_STRIP-1:0] asd_out,
  input  strip_cfg_t         cfg,
  input  logic               trig_v,
  input  logic [BCID_W-1:0]  trig_bcid,
  input  logic [BAND_W-1:0]  trig_bandphi,
  input  logic [2:0]         lut_wr_mask,
  input  logic [7:0]         lut_wr_addr,
  input  logic [STRIP_IDX_W-1:0] lut_wr_first,
  input  logic [STRIP_IDX_W-1:0] lut_wr_last,
  output logic [FRAME_W-1:0] frame,
  output logic               data_frame,
  output logic               trig_accepted   // a trigger entered the pipeline
);
  typedef struct packed {
    logic                   v;
    logic [BCID_W-1:0]      bcid;
    logic [BAND_W-1:0]      bandphi;
    logic [STRIP_IDX_W-1:0] lead;
  } trig_t;

  localparam int N_GEN = 14;

  logic global_t, bypass_t;
  logic [N_GEN-1:0] pat_a, pat_b;
  logic [N_STRIP-1:0] des_v, rb_match, m4;
  strip_unit_t des_u [N_STRIP];
  logic [CHARGE_W-1:0] rb_charge [N_STRIP], q4 [N_STRIP];
  trig_t t0, t1, t2, t3, t4, t4x, t5, t6, t7;
  logic [STRIP_IDX_W-1:0] lut_first, lut_last;
  logic [N_STRIP-1:0] strip_en;
  logic [N_BAND-1:0] sel_m, seq_m;
  logic [CHARGE_W-1:0] sel_q [N_BAND], seq_q [N_BAND];
  logic int_trig;
  strip_unit_t byp_u;

  assign global_t = (cfg.test_mode == TM_GLOBAL);
  assign bypass_t = (cfg.test_mode == TM_BYPASS);

  asd_pattern_gen #(.N_GEN(N_GEN)) u_pat (
    .clk160, .rst_n, .enable(global_t), .ch_en(cfg.pat_en), .bcid, .bc_phase,
    .pat_bcid(cfg.pat_bcid), .pat_a, .pat_b);

  for (genvar i = 0; i < N_STRIP; i++) begin : g_ch
    if (i < N_GEN) begin : g_pat
      strip_deserializer u_des (
        .clk160, .rst_n, .out_line(asd_out[i]), .use_pat(global_t),
        .pat_a(pat_a[i]), .pat_b(pat_b[i]), .bc_phase, .bcid, .win_ext(cfg.win_ext),
        .valid(des_v[i]), .unit(des_u[i]));
    end else begin : g_nopat
      strip_deserializer u_des (
        .clk160, .rst_n, .out_line(asd_out[i]), .use_pat(1'b0),
        .pat_a(1'b0), .pat_b(1'b0), .bc_phase, .bcid, .win_ext(cfg.win_ext),
        .valid(des_v[i]), .unit(des_u[i]));
    end
    strip_ring_buffer u_rb (
      .clk160, .rst_n, .wr(des_v[i] && !bypass_t), .unit(des_u[i]),
      .bc_tick(bc_phase == 2'd0), .timeout(cfg.timeout),
      .sample(t2.v && strip_en[i]), .trig_bcid(t2.bcid),
      .match(rb_match[i]), .charge(rb_charge[i]));
  end

  // Trigger source.
  assign int_trig = global_t && bc_phase == 2'd0 &&
                    bcid == cfg.pat_bcid + BCID_W'(cfg.trig_delay);
  always_comb begin
    t0 = '0;
    if (global_t) begin
      t0.v = int_trig;
      t0.bcid = cfg.pat_bcid;
      t0.bandphi = cfg.int_bandphi;
    end else if (!bypass_t && cfg.test_mode != TM_FRAME_GEN) begin
      t0.v = trig_v;
      t0.bcid = trig_bcid;
      t0.bandphi = trig_bandphi;
    end
  end
  assign trig_accepted = t0.v;

  pad_lut_tmr u_lut (
    .clk160, .rst_n, .wr_mask(lut_wr_mask), .wr_addr(lut_wr_addr),
    .wr_first(lut_wr_first), .wr_last(lut_wr_last),
    .rd_addr(t0.bandphi[BAND_W-1 -: 8]), .first(lut_first), .last(lut_last));

  strip_enable_encoder u_enc (
    .clk160, .rst_n, .first(lut_first), .last(lut_last), .enable(strip_en));

  // Bypass: the probed channel's unit, as a match, injected at the compare stage.
  assign byp_u = des_u[cfg.bypass_ch];
  always_comb begin
    m4 = rb_match;
    q4 = rb_charge;
    if (bypass_t) begin
      m4 = '0;
      m4[cfg.bypass_ch] = des_v[cfg.bypass_ch];
      q4[cfg.bypass_ch] = byp_u.charge;
    end
  end
  always_comb begin
    t4x = t4;
    if (bypass_t)
      t4x = '{v: des_v[cfg.bypass_ch], bcid: byp_u.bcid, bandphi: '0,
              lead: (cfg.bypass_ch == 0) ? '0 : cfg.bypass_ch - 1'b1};
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= '0; t2 <= '0; t3 <= '0; t4 <= '0; t5 <= '0; t6 <= '0; t7 <= '0;
    end else begin
      t1 <= t0;
      t2 <= t1;
      t2.lead <= lut_first;          // LUT result arrives with t1 -> t2
      t3 <= t2;
      t4 <= t3;
      t5 <= t4x;
      t6 <= t5;
      t7 <= t6;
    end
  end

  strip_selector u_sel (
    .clk160, .rst_n, .lead(t4x.lead), .match(m4), .charge(q4),
    .sel_match(sel_m), .sel_charge(sel_q));

  strip_sequencer u_seq (
    .clk160, .rst_n, .lead(t5.lead), .in_match(sel_m), .in_charge(sel_q),
    .out_match(seq_m), .out_charge(seq_q));

  strip_frame_builder u_fb (
    .clk160, .rst_n, .bc_phase, .frame_gen(cfg.test_mode == TM_FRAME_GEN),
    .in_v(t7.v), .in_bcid(t7.bcid), .in_bandphi(t7.bandphi),
    .in_match(seq_m), .in_charge(seq_q), .frame, .data_frame);
endmodule
