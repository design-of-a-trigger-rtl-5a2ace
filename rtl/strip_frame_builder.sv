// strip_frame_builder: "Frame Build and Control" of the strip mode.
// Per trigger it receives the 17 band strips in band order (strip 0 = leading
// strip = "2nd top", strip 1 = "1st top"), keeps 14 of them - strips 0..13 if the
// 1st top strip fired (matched), else strips 3..16 - and packs a 104-bit payload,
// LSB first: trigger BCID[5:0], band-phi ID[12:0], the select bit (1 = first 14),
// then the 14 six-bit charges (zero where the strip did not match). The payload is
// sent as four 30-bit frames, each a 4-bit header and 26 payload bits (frame 0 holds
// payload bits 103:78). Data frames carry header 1010; in a BC without a trigger the
// four frames are NULL frames with header 0110 and zero payload.
// frame_gen=1 replaces the data with training frames ("Frame Gen"): every BC a data
// packet whose payload is a 13-bit counter repeated eight times.
// Timing: frame groups start at BC boundaries. A group is loaded at the end of the
// cycle with bc_phase 3, straight from the inputs if in_v is high in that cycle,
// otherwise from a one-packet holding register filled by an earlier in_v. Frame k
// of a group is on `frame` in the cycle after bc_phase k, so a request that arrives
// in the bc_phase-3 cycle has its first frame out two clock edges later. Header values and the 14-of-17 rule follow
// the paper; payload order, NULL contents and training content are this design's.
module strip_frame_builder
  import tds_pkg::*;
(
  input  logic                clk160,
  input  logic                rst_n,
  input  logic [1:0]          bc_phase,
  input  logic                frame_gen,
  input  logic                in_v,
  input  logic [BCID_W-1:0]   in_bcid,
  input  logic [BAND_W-1:0]   in_bandphi,
  input  logic [N_BAND-1:0]   in_match,
  input  logic [CHARGE_W-1:0] in_charge [N_BAND],
  output logic [FRAME_W-1:0]  frame,
  output logic                data_frame   // frame carries header 1010
);
  localparam int PAY_W = 4 * (FRAME_W - 4);  // 104

  logic [PAY_W-1:0] pay_n, pend, grp;
  logic pend_v, grp_data;
  logic [BAND_W-1:0] fg_cnt;
  logic first14;

  always_comb begin
    int base;
    first14 = in_match[1];
    base    = first14 ? 0 : 3;
    pay_n = '0;
    pay_n[5:0]  = in_bcid[5:0];
    pay_n[18:6] = in_bandphi;
    pay_n[19]   = first14;
    for (int k = 0; k < N_READ; k++)
      pay_n[20 + CHARGE_W*k +: CHARGE_W] = in_match[base+k] ? in_charge[base+k] : '0;
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; pend_v <= 1'b0; grp <= '0; grp_data <= 1'b0; fg_cnt <= '0;
      frame <= '0; data_frame <= 1'b0;
    end else begin
      if (bc_phase == 2'd3) begin
        if (frame_gen) begin
          grp      <= {8{fg_cnt}};
          grp_data <= 1'b1;
          fg_cnt   <= fg_cnt + 1'b1;
        end else begin
          grp      <= in_v ? pay_n : pend_v ? pend : '0;
          grp_data <= in_v | pend_v;
        end
        pend_v <= 1'b0;
      end
      if (in_v && !(bc_phase == 2'd3 && !frame_gen)) begin
        pend   <= pay_n;
        pend_v <= 1'b1;
      end
      frame      <= {grp_data ? HDR_DATA : HDR_NULL,
                     grp[PAY_W-1 - 26*int'(bc_phase) -: 26]};
      data_frame <= grp_data;
    end
  end
endmodule
