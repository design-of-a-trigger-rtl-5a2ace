// strip_sequencer: restores band order after the 8-1 selectors. Band strip i
// (i = 0 the leading strip) sits on selector (lead + i) mod 17, so the output is
// out[i] = in[(lead + i) mod 17]. Example from the paper: band 18..34 comes out of
// selectors 0..16 as 34,18,19,..,33 and leaves the sequencer as 18..34.
// Two register stages (12.5 ns, the paper's figure for this step): the first holds
// the inputs and the rotation amount, the second the rotated result.
module strip_sequencer
  import tds_pkg::*;
(
  input  logic                   clk160,
  input  logic                   rst_n,
  input  logic [STRIP_IDX_W-1:0] lead,
  input  logic [N_BAND-1:0]      in_match,
  input  logic [CHARGE_W-1:0]    in_charge [N_BAND],
  output logic [N_BAND-1:0]      out_match,
  output logic [CHARGE_W-1:0]    out_charge [N_BAND]
);
  logic [N_BAND-1:0]   m_q;
  logic [CHARGE_W-1:0] q_q [N_BAND];
  logic [4:0]          rot_q;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      m_q <= '0; rot_q <= '0; out_match <= '0;
      for (int j = 0; j < N_BAND; j++) begin
        q_q[j] <= '0;
        out_charge[j] <= '0;
      end
    end else begin
      m_q   <= in_match;
      rot_q <= 5'(int'(lead) % N_BAND);
      for (int j = 0; j < N_BAND; j++) q_q[j] <= in_charge[j];
      for (int i = 0; i < N_BAND; i++) begin
        out_match[i]  <= m_q[(int'(rot_q) + i) % N_BAND];
        out_charge[i] <= q_q[(int'(rot_q) + i) % N_BAND];
      end
    end
  end
endmodule
