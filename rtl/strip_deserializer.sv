// strip_deserializer: decodes one ASD strip output line into a charge strip data
// unit (6-bit charge, 12-bit BCID, FLAG), as described in the paper.
// The ASD raises OUT when it finds the charge peak; the BCID of that leading edge is
// the hit time. When the 6-bit ADC is done OUT drops for half a clock cycle and then
// carries D5..D0 at both edges of the 160 MHz clock (320 Mb/s). The line is sampled
// on both clk160 edges; each cycle the decoder takes the pair (first half, second
// half) in time order, or the pair from the internal pattern generator when
// use_pat=1. Decoder states: IDLE -> HIGH (leading edge seen) -> DATA (6 bits after
// the low half-cycle) -> WAIT_LOW (until OUT is low again) -> IDLE.
// FLAG marks a hit that came in the first win_ext x 6.25 ns of its BC, so that with
// a matching window of 25 + win_ext x 6.25 ns it may still belong to the previous BC.
// Timing: `valid` pulses for one cycle, one cycle after the pair holding D0.
// Waiting for OUT low after D0 is this design's choice.
module strip_deserializer
  import tds_pkg::*;
(
  input  logic              clk160,
  input  logic              rst_n,
  input  logic              out_line,
  input  logic              use_pat,
  input  logic              pat_a,
  input  logic              pat_b,
  input  logic [1:0]        bc_phase,
  input  logic [BCID_W-1:0] bcid,
  input  logic [2:0]        win_ext,
  output logic              valid,
  output strip_unit_t       unit
);
  typedef enum logic [1:0] {IDLE, HIGH, DATA, WAIT_LOW} st_e;

  logic s_pos, s_neg;
  logic [1:0] ph_q;
  logic [BCID_W-1:0] bcid_q;
  st_e st, st_n;
  logic [2:0] cnt, cnt_n;
  logic [CHARGE_W-1:0] sh, sh_n;
  logic [BCID_W-1:0] tag, tag_n;
  logic fl, fl_n;
  logic done;
  logic [1:0] smp;   // smp[1] first half, smp[0] second half

  always_ff @(negedge clk160 or negedge rst_n)
    if (!rst_n) s_neg <= 1'b0;
    else        s_neg <= out_line;

  assign smp = use_pat ? {pat_a, pat_b} : {s_pos, s_neg};

  always_comb begin
    st_n = st; cnt_n = cnt; sh_n = sh; tag_n = tag; fl_n = fl; done = 1'b0;
    for (int k = 1; k >= 0; k--) begin
      unique case (st_n)
        IDLE: if (smp[k]) begin
          st_n  = HIGH;
          tag_n = bcid_q;
          fl_n  = ({1'b0, ph_q} < win_ext);
        end
        HIGH: if (!smp[k]) begin
          st_n  = DATA;
          cnt_n = '0;
        end
        DATA: begin
          sh_n  = {sh_n[CHARGE_W-2:0], smp[k]};
          cnt_n = cnt_n + 3'd1;
          if (cnt_n == 3'd6) begin
            done = 1'b1;
            st_n = WAIT_LOW;
          end
        end
        default: if (!smp[k]) st_n = IDLE;
      endcase
    end
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      s_pos <= 1'b0; ph_q <= '0; bcid_q <= '0;
      st <= IDLE; cnt <= '0; sh <= '0; tag <= '0; fl <= 1'b0;
      valid <= 1'b0; unit <= '0;
    end else begin
      s_pos <= out_line; ph_q <= bc_phase; bcid_q <= bcid;
      st <= st_n; cnt <= cnt_n; sh <= sh_n; tag <= tag_n; fl <= fl_n;
      valid <= done;
      if (done) unit <= '{charge: sh_n, bcid: tag_n, flag: fl_n};
    end
  end
endmodule
