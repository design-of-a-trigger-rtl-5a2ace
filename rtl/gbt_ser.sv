// gbt_ser: behavioural model of the 4.8 Gb/s serializer core ("GBT SER DM").
// This is a model, not the circuit: the real core is a radiation-hard mixed-signal
// macro with its own PLL, taken by the TDS from an earlier serializer chip. The
// model latches a 30-bit word at every rising edge of clk160 and sends it MSB first,
// one bit per cycle of clk_ser (4.8 GHz, 30 clk_ser cycles per clk160 cycle). A
// modulo-30 counter in the clk_ser domain moves the latched word into the shift
// register halfway through the clk160 cycle, away from the clk160 edge, so the two
// clocks only need to have a fixed phase after reset.
module gbt_ser
  import tds_pkg::*;
(
  input  logic               clk160,
  input  logic               clk_ser,
  input  logic               rst_n,
  input  logic [FRAME_W-1:0] din,
  output logic               sout
);
  logic [FRAME_W-1:0] hold, shreg;
  logic [4:0] cnt;

  always_ff @(posedge clk160 or negedge rst_n)
    if (!rst_n) hold <= '0;
    else        hold <= din;

  always_ff @(posedge clk_ser or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      cnt   <= '0;
    end else begin
      cnt <= (cnt == 5'd29) ? 5'd0 : cnt + 5'd1;
      if (cnt == 5'd14) shreg <= hold;
      else              shreg <= {shreg[FRAME_W-2:0], 1'b0};
    end
  end
  assign sout = shreg[FRAME_W-1];
endmodule
