// asd_pattern_gen: embedded ASD charge pattern generator for strip channels 0..13,
// used in the Global-Test mode so that the whole strip chain can be exercised
// without ASD chips. The paper gives only its purpose; the waveform here copies the
// ASD output of the paper's ASD timing figure: OUT goes high at the charge peak,
// stays high (here 4 clk160 cycles), drops for half a cycle, then carries the 6-bit
// charge D5..D0 at both clock edges and returns low.
// Because the generator sits inside the chip, it hands the deserializers the two
// half-cycle samples of each clk160 cycle directly (pat_a: first half, pat_b:
// second half), the same form the deserializers produce from an external line.
// A pulse starts when bcid == pat_bcid at bc_phase 1, on every enabled channel;
// channel i sends charge i (as the paper's FPGA test does with channel numbers).
module asd_pattern_gen
  import tds_pkg::*;
#(
  parameter int N_GEN = 14
) (
  input  logic              clk160,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [N_GEN-1:0]  ch_en,
  input  logic [BCID_W-1:0] bcid,
  input  logic [1:0]        bc_phase,
  input  logic [BCID_W-1:0] pat_bcid,
  output logic [N_GEN-1:0]  pat_a,
  output logic [N_GEN-1:0]  pat_b
);
  logic       busy;
  logic [2:0] cyc;     // clk160 cycle of the waveform, 0..7

  // Waveform value in half-slot h (two half-slots per cycle).
  function automatic logic wave(input int unsigned h, input logic [CHARGE_W-1:0] q);
    if (h < 8)       return 1'b1;                 // high until end of conversion
    else if (h == 8) return 1'b0;                 // half-cycle low marker
    else if (h < 15) return q[CHARGE_W-1-(h-9)];  // D5 first
    else             return 1'b0;
  endfunction

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cyc   <= '0;
      pat_a <= '0;
      pat_b <= '0;
    end else begin
      if (!busy && enable && bcid == pat_bcid && bc_phase == 2'd1) begin
        busy <= 1'b1;
        cyc  <= 3'd1;
        for (int i = 0; i < N_GEN; i++) begin
          pat_a[i] <= ch_en[i] & wave(0, CHARGE_W'(i));
          pat_b[i] <= ch_en[i] & wave(1, CHARGE_W'(i));
        end
      end else if (busy) begin
        cyc <= cyc + 3'd1;
        if (cyc == 3'd7) busy <= 1'b0;
        for (int i = 0; i < N_GEN; i++) begin
          pat_a[i] <= ch_en[i] & wave(2*cyc,   CHARGE_W'(i));
          pat_b[i] <= ch_en[i] & wave(2*cyc+1, CHARGE_W'(i));
        end
      end else begin
        pat_a <= '0;
        pat_b <= '0;
      end
    end
  end
endmodule
