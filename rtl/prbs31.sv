// prbs31: PRBS-31 pattern (x^31 + x^28 + 1) for testing the 4.8 Gb/s link,
// 30 bits per clk160 cycle, bit 29 first. Each new bit is s[30] ^ s[27] of the
// 31-bit state, shifted in at the bottom. The polynomial is the paper's; the
// all-ones seed and the bit order are this design's choices. Output registered.
module prbs31
  import tds_pkg::*;
(
  input  logic               clk160,
  input  logic               rst_n,
  input  logic               en,
  output logic [FRAME_W-1:0] dout
);
  logic [30:0] state, state_n;
  logic [FRAME_W-1:0] bits;

  always_comb begin
    state_n = state;
    for (int i = FRAME_W-1; i >= 0; i--) begin
      bits[i] = state_n[30] ^ state_n[27];
      state_n = {state_n[29:0], bits[i]};
    end
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      state <= '1;
      dout  <= '0;
    end else if (en) begin
      state <= state_n;
      dout  <= bits;
    end
  end
endmodule
