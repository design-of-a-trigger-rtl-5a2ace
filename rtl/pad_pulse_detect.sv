// pad_pulse_detect: leading-edge detection and BCID tagging for one pad channel.
// The ASD sends a time-over-threshold (TOT) pulse; the hit belongs to the BC in
// which its leading edge arrives. The input is sampled on both edges of clk160,
// which cuts the BC into eight 3.125 ns slots (slot = 2*bc_phase + half). Cable
// length differences are compensated per channel, as in the paper, by delaying the
// channel's own BC clock by phase_shift slots (0..7, up to 21.875 ns): a leading edge
// that arrives in a slot before the delayed BC boundary (slot < phase_shift) is
// still counted in the previous BC and gets bcid-1. The paper builds the delayed
// clock from dual-edge shift registers; here the same delay is applied by this
// slot comparison, which gives the same tags.
// Timing: a sample taken at posedge k (first half) or at the following negedge
// (second half) is reported with hit=1 for one cycle after posedge k+1.
module pad_pulse_detect
  import tds_pkg::*;
(
  input  logic              clk160,
  input  logic              rst_n,
  input  logic              tot,
  input  logic [1:0]        bc_phase,
  input  logic [BCID_W-1:0] bcid,
  input  logic [2:0]        phase_shift,
  output logic              hit,
  output logic [BCID_W-1:0] hit_bcid
);
  logic s_pos, s_neg, s_last;      // samples: posedge, negedge, previous second half
  logic [1:0] ph_q;
  logic [BCID_W-1:0] bcid_q;
  logic [2:0] slot;
  logic rise_a, rise_b;

  always_ff @(negedge clk160 or negedge rst_n)
    if (!rst_n) s_neg <= 1'b0;
    else        s_neg <= tot;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      s_pos  <= 1'b0;
      s_last <= 1'b0;
      ph_q   <= '0;
      bcid_q <= '0;
      hit      <= 1'b0;
      hit_bcid <= '0;
    end else begin
      s_pos  <= tot;
      ph_q   <= bc_phase;
      bcid_q <= bcid;
      s_last <= s_neg;
      hit    <= rise_a | rise_b;
      hit_bcid <= (slot < phase_shift) ? bcid_q - 1'b1 : bcid_q;
    end
  end

  // s_pos / s_neg were taken at posedge k and the negedge after it; s_last at the
  // negedge before posedge k.
  assign rise_a = s_pos & ~s_last;
  assign rise_b = s_neg & ~s_pos;
  assign slot   = {ph_q, rise_a ? 1'b0 : 1'b1};
endmodule
