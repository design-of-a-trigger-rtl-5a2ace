// strip_selector: the seventeen 8-1 selectors that bring the (at most) 17 strips of
// a trigger band out of 128 channels, as in the paper. Selector j is wired to
// channels j, j+17, j+34, ..., j+119 (inputs beyond channel 127 read zero). Any 17
// consecutive strips fall on 17 different selectors, so each selector picks the one
// of its channels that lies in [lead, lead+16]: channel lead + ((j - lead) mod 17),
// input number (that channel) / 17. The outputs are therefore in selector order,
// not band order; strip_sequencer restores the order. Output registered.
module strip_selector
  import tds_pkg::*;
(
  input  logic                   clk160,
  input  logic                   rst_n,
  input  logic [STRIP_IDX_W-1:0] lead,
  input  logic [N_STRIP-1:0]     match,
  input  logic [CHARGE_W-1:0]    charge [N_STRIP],
  output logic [N_BAND-1:0]      sel_match,
  output logic [CHARGE_W-1:0]    sel_charge [N_BAND]
);
  logic [N_BAND-1:0]   m_n;
  logic [CHARGE_W-1:0] q_n [N_BAND];

  always_comb begin
    for (int j = 0; j < N_BAND; j++) begin
      int off, ch, s;
      off = (j - (int'(lead) % N_BAND) + N_BAND) % N_BAND;
      ch  = int'(lead) + off;
      s   = ch / N_BAND;              // 8-1 select
      m_n[j] = 1'b0;
      q_n[j] = '0;
      for (int m = 0; m < 8; m++) begin
        if (m == s && j + N_BAND*m < N_STRIP) begin
          m_n[j] = match[j + N_BAND*m];
          q_n[j] = charge[j + N_BAND*m];
        end
      end
    end
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      sel_match <= '0;
      for (int j = 0; j < N_BAND; j++) sel_charge[j] <= '0;
    end else begin
      sel_match <= m_n;
      for (int j = 0; j < N_BAND; j++) sel_charge[j] <= q_n[j];
    end
  end
endmodule
