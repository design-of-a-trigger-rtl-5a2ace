// bcid_counter: global bunch-crossing counter of the TDS.
// The chip runs on clk160; a BC (25 ns) is four clk160 cycles. The counter keeps the
// 2-bit position of the current cycle inside the BC (bc_phase) and the 12-bit BCID,
// which advances when bc_phase wraps from 3 to 0. A one-cycle LHC BCR pulse clears
// both, so the cycle after BCR is phase 0 of BCID 0. The BCID width (12 bits) and
// the BCR input follow the paper's block diagrams; running it on clk160 with a
// phase counter, instead of a separate 40 MHz clock, and wrapping at 4095 are this
// design's choices.
module bcid_counter #(
  parameter int BCID_W = 12
) (
  input  logic              clk160,
  input  logic              rst_n,
  input  logic              bcr,
  output logic [BCID_W-1:0] bcid,
  output logic [1:0]        bc_phase
);
  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      bcid     <= '0;
      bc_phase <= '0;
    end else if (bcr) begin
      bcid     <= '0;
      bc_phase <= '0;
    end else begin
      bc_phase <= bc_phase + 2'd1;
      if (bc_phase == 2'd3) bcid <= bcid + 1'b1;
    end
  end
endmodule
