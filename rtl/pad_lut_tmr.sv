// pad_lut_tmr: lookup table that turns the band ID of a trigger into the first
// and last strip of the band, kept in three copies with a bit-wise majority vote
// (the paper draws "Pad LUT #0..#2 with TMR"). The band ID is the upper BAND_ID_W
// bits of the 13-bit band-phi ID; the split and the 256-entry size are this design's
// choice. Copies are written through a configuration port (wr_mask picks the copies,
// normally all three; writing one copy alone emulates an upset). Contents reset to
// zero. Read: the voted entry is registered, one clk160 cycle after `rd`.
module pad_lut_tmr
  import tds_pkg::*;
#(
  parameter int BAND_ID_W = 8
) (
  input  logic                   clk160,
  input  logic                   rst_n,
  input  logic [2:0]             wr_mask,
  input  logic [BAND_ID_W-1:0]   wr_addr,
  input  logic [STRIP_IDX_W-1:0] wr_first,
  input  logic [STRIP_IDX_W-1:0] wr_last,
  input  logic [BAND_ID_W-1:0]   rd_addr,
  output logic [STRIP_IDX_W-1:0] first,
  output logic [STRIP_IDX_W-1:0] last
);
  localparam int N = 1 << BAND_ID_W;
  localparam int EW = 2*STRIP_IDX_W;

  logic [EW-1:0] lut [3][N];
  logic [EW-1:0] a, b, c, v;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 3; k++)
        for (int i = 0; i < N; i++) lut[k][i] <= '0;
      first <= '0;
      last  <= '0;
    end else begin
      for (int k = 0; k < 3; k++)
        if (wr_mask[k]) lut[k][wr_addr] <= {wr_first, wr_last};
      {first, last} <= v;
    end
  end

  assign a = lut[0][rd_addr];
  assign b = lut[1][rd_addr];
  assign c = lut[2][rd_addr];
  assign v = (a & b) | (a & c) | (b & c);
endmodule
