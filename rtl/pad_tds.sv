// pad_tds: pad-mode datapath of the TDS. For each of the 104 pads a
// pad_pulse_detect tags leading edges with a (delay-compensated) BCID and a
// pad_ring_buffer keeps the last two. Once per BC, at the end of the cycle with bc_phase 2,
// every channel compares its buffer with BCID-2 and registers its YES/NO flag:
// the BC under test is two BCs old so that channels delayed by up to 21.875 ns have
// all written their hits (a hit in the last slot of a delayed BC is stored two
// cycles into the BC after next). The flags and that BCID are loaded into the frame builder
// in the next cycle, which sends four frames per BC (frame 0 with header 1010,
// scrambled afterwards by the shared scrambler). The structure (pulse detection,
// 2-deep ring buffers, frame builder with BCID) follows the paper; the choice of the
// tested BCID and the compare phase are this design's.
module pad_tds
  import tds_pkg::*;
#(
  parameter int N_CH = N_PAD
) (
  input  logic               clk160,
  input  logic               rst_n,
  input  logic [BCID_W-1:0]  bcid,
  input  logic [1:0]         bc_phase,
  input  logic [N_CH-1:0]    tot,
  input  logic [2:0]         phase_shift [N_CH],
  input  logic [7:0]         timeout,
  output logic [FRAME_W-1:0] frame,
  output logic               hdr,
  output logic [N_CH-1:0]    flags       // firing status of the BC under test
);
  logic [N_CH-1:0] hit;
  logic [BCID_W-1:0] hit_bcid [N_CH];
  logic cmp, load;
  logic [BCID_W-1:0] ref_bcid, ref_q;
  logic [N_PAD-1:0] flags_full;

  assign cmp      = (bc_phase == 2'd2);
  assign ref_bcid = bcid - BCID_W'(2);

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    pad_pulse_detect u_det (
      .clk160, .rst_n, .tot(tot[i]), .bc_phase, .bcid,
      .phase_shift(phase_shift[i]), .hit(hit[i]), .hit_bcid(hit_bcid[i]));
    pad_ring_buffer u_rb (
      .clk160, .rst_n, .hit(hit[i]), .hit_bcid(hit_bcid[i]),
      .bc_tick(bc_phase == 2'd0), .cmp, .ref_bcid, .timeout, .flag(flags[i]));
  end

  always_ff @(posedge clk160 or negedge rst_n)
    if (!rst_n) begin
      load  <= 1'b0;
      ref_q <= '0;
    end else begin
      load <= cmp;
      if (cmp) ref_q <= ref_bcid;
    end

  assign flags_full = N_PAD'(flags);

  pad_frame_builder u_fb (
    .clk160, .rst_n, .load, .flags(flags_full), .bcid(ref_q),
    .frame, .hdr);
endmodule
