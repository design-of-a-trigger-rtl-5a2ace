// tds_top: the Trigger Data Serializer, pad and strip modes in one chip.
// The `mode` pin selects the active mode (0 = pad, 1 = strip); the other mode is
// held in reset, as the paper describes for power saving. Both modes share the
// global BCID counter (cleared by LHC BCR), the 30-bit scrambler, the PRBS-31 test
// generator and the 4.8 Gb/s serializer model. ASD inputs share pins: pad mode uses
// asd_in[103:0], strip mode asd_in[127:0]. The pad-trigger request (clk320, en,
// d0, d1) is decoded by pad_trigger_if for the strip mode.
// Every clk160 cycle one 30-bit word goes to the serializer: tx_word shows it
// (scrambled frame, or PRBS-31 when prbs_en), ser_out is the serial line.
// Not in this RTL: the PLL/ePLL (clk160, clk320 and the 4.8 GHz clk_ser are inputs),
// the I2C configuration block (its settings are the cfg/lut ports) and the full
// triple modular redundancy of the chip's logic.
module tds_top
  import tds_pkg::*;
(
  input  logic               clk160,
  input  logic               clk320,
  input  logic               clk_ser,
  input  logic               rst_n,
  input  logic               mode,
  input  logic               bcr,
  input  logic [N_STRIP-1:0] asd_in,
  // pad-trigger interface (strip mode)
  input  logic               trig_en,
  input  logic               trig_d0,
  input  logic               trig_d1,
  // configuration
  input  logic               prbs_en,
  input  logic [2:0]         pad_phase [N_PAD],
  input  logic [7:0]         pad_timeout,
  input  strip_cfg_t         strip_cfg,
  input  logic [2:0]         lut_wr_mask,
  input  logic [7:0]         lut_wr_addr,
  input  logic [STRIP_IDX_W-1:0] lut_wr_first,
  input  logic [STRIP_IDX_W-1:0] lut_wr_last,
  // outputs
  output logic [FRAME_W-1:0] tx_word,
  output logic               ser_out,
  output logic [BCID_W-1:0]  bcid,
  output logic [N_PAD-1:0]   pad_flags,
  output logic               strip_data_frame,
  output logic               strip_trig
);
  logic [1:0] bc_phase;
  logic rst_pad_n, rst_strip_n;
  logic [FRAME_W-1:0] pad_frame, strip_frame, scr_in, scr_out, prbs;
  logic pad_hdr;
  logic t_v;
  logic [BCID_W-1:0] t_bcid;
  logic [BAND_W-1:0] t_bp;

  assign rst_pad_n   = rst_n & ~mode;
  assign rst_strip_n = rst_n &  mode;

  bcid_counter u_bcid (.clk160, .rst_n, .bcr, .bcid, .bc_phase);

  pad_tds u_pad (
    .clk160, .rst_n(rst_pad_n), .bcid, .bc_phase, .tot(asd_in[N_PAD-1:0]),
    .phase_shift(pad_phase), .timeout(pad_timeout), .frame(pad_frame),
    .hdr(pad_hdr), .flags(pad_flags));

  pad_trigger_if u_ptif (
    .clk320, .clk160, .rst_n(rst_strip_n), .en(trig_en), .d0(trig_d0), .d1(trig_d1),
    .trig_v(t_v), .trig_bcid(t_bcid), .trig_bandphi(t_bp));

  strip_tds u_strip (
    .clk160, .rst_n(rst_strip_n), .bcid, .bc_phase, .asd_out(asd_in), .cfg(strip_cfg),
    .trig_v(t_v), .trig_bcid(t_bcid), .trig_bandphi(t_bp),
    .lut_wr_mask, .lut_wr_addr, .lut_wr_first, .lut_wr_last,
    .frame(strip_frame), .data_frame(strip_data_frame), .trig_accepted(strip_trig));

  assign scr_in = mode ? strip_frame : pad_frame;

  // Strip frames always start with a header; pad frames only frame 0.
  scrambler u_scr (.clk160, .rst_n, .din(scr_in), .hdr(mode | pad_hdr), .dout(scr_out));

  prbs31 u_prbs (.clk160, .rst_n, .en(prbs_en), .dout(prbs));

  assign tx_word = prbs_en ? prbs : scr_out;

  gbt_ser u_ser (.clk160, .clk_ser, .rst_n, .din(tx_word), .sout(ser_out));
endmodule
