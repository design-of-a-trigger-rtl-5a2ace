// pad_trigger_if: receiver of the trigger request sent by the pad trigger extractor.
// The request uses four lines: clk320, en and two data lines d0/d1 at 640 Mb/s,
// i.e. one bit on each edge of clk320. While en is high, the 13 bits d12..d0 of
// each line arrive MSB first; d12 is taken at the first rising edge with en high,
// d11 at the next falling edge, and so on, so rising edges see d12,d10,..,d0 and
// falling edges d11,..,d1. When en is seen low again, the word is complete:
// d0 carries the trigger BCID in bits [12:1], d1 the 13-bit band-phi ID.
// The decoded request is handed to clk160 (which comes from the same PLL as clk320
// and is phase related to it) with a toggle that is retimed once in clk160; trig_v
// then pulses for one clk160 cycle with the request on trig_bcid/trig_bandphi.
// Line use and bit fields follow the paper; sampling on both edges follows its
// 640 Mb/s figure; the crossing scheme is this design's choice within the paper's
// 6.25 ns budget for it.
module pad_trigger_if
  import tds_pkg::*;
(
  input  logic              clk320,
  input  logic              clk160,
  input  logic              rst_n,
  input  logic              en,
  input  logic              d0,
  input  logic              d1,
  output logic              trig_v,
  output logic [BCID_W-1:0] trig_bcid,
  output logic [BAND_W-1:0] trig_bandphi
);
  logic [6:0] p0, p1;      // rising-edge samples, newest in bit 0
  logic [5:0] n0, n1;      // falling-edge samples
  logic [2:0] pcnt, ncnt;
  logic en_q, tog;
  logic [BAND_W-1:0] w0, w1, w0_q, w1_q;
  logic t1, t2;

  always_ff @(negedge clk320 or negedge rst_n) begin
    if (!rst_n) begin
      n0 <= '0; n1 <= '0; ncnt <= '0;
    end else if (en && pcnt != 3'd0 && ncnt < 3'd6) begin
      n0 <= {n0[4:0], d0};
      n1 <= {n1[4:0], d1};
      ncnt <= ncnt + 3'd1;
    end else if (!en) begin
      ncnt <= '0;
    end
  end

  // Interleave: word bit 2i from the i-th newest rising sample, 2i+1 from falling.
  always_comb begin
    for (int i = 0; i < 7; i++) begin
      w0[2*i] = p0[i];
      w1[2*i] = p1[i];
    end
    for (int i = 0; i < 6; i++) begin
      w0[2*i+1] = n0[i];
      w1[2*i+1] = n1[i];
    end
  end

  always_ff @(posedge clk320 or negedge rst_n) begin
    if (!rst_n) begin
      p0 <= '0; p1 <= '0; pcnt <= '0; en_q <= 1'b0; tog <= 1'b0;
      w0_q <= '0; w1_q <= '0;
    end else begin
      en_q <= en;
      if (en && pcnt < 3'd7) begin
        p0 <= {p0[5:0], d0};
        p1 <= {p1[5:0], d1};
        pcnt <= pcnt + 3'd1;
      end else if (!en) begin
        pcnt <= '0;
      end
      if (en_q && !en && pcnt == 3'd7 && ncnt == 3'd6) begin
        w0_q <= w0;
        w1_q <= w1;
        tog  <= ~tog;
      end
    end
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= 1'b0; t2 <= 1'b0; trig_v <= 1'b0; trig_bcid <= '0; trig_bandphi <= '0;
    end else begin
      t1 <= tog;
      t2 <= t1;
      trig_v <= t1 ^ t2;
      if (t1 ^ t2) begin
        trig_bcid    <= w0_q[12:1];
        trig_bandphi <= w1_q;
      end
    end
  end
endmodule
