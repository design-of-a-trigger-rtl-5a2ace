// scrambler: 30-bit parallel self-synchronizing scrambler, polynomial 1+x^39+x^58,
// the scrambler of the IEEE 802.3 10 Gb/s physical layer used by the paper for DC
// balance. Bits are processed in transmission order (bit 29 first); each output
// bit is d ^ s[38] ^ s[57] and is shifted into the 58-bit state. When `hdr` is
// set, bits 29:26 are a frame header: they pass unchanged and do not enter the
// state, so only the 26 data bits are scrambled. One register stage (6.25 ns, as
// in the paper's latency tables). The all-ones state after reset is this design's
// choice; a self-synchronizing descrambler does not depend on it.
module scrambler
  import tds_pkg::*;
(
  input  logic               clk160,
  input  logic               rst_n,
  input  logic [FRAME_W-1:0] din,
  input  logic               hdr,
  output logic [FRAME_W-1:0] dout
);
  logic [57:0] state, state_n;
  logic [FRAME_W-1:0] scr;

  always_comb begin
    state_n = state;
    scr     = din;
    for (int i = FRAME_W-1; i >= 0; i--) begin
      if (!(hdr && i >= FRAME_W-4)) begin
        scr[i]  = din[i] ^ state_n[38] ^ state_n[57];
        state_n = {state_n[56:0], scr[i]};
      end
    end
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      state <= '1;
      dout  <= '0;
    end else begin
      state <= state_n;
      dout  <= scr;
    end
  end
endmodule
