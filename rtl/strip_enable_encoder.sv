// strip_enable_encoder: turns a band of strips into a 128-bit trigger enable vector,
// as in the paper. Encoder 1 makes the thermal code of the first strip,
// vt[i] = (i >= first); encoder 2 the inverse thermal code of the last strip,
// vt_inv[i] = (i <= last). Their AND has ones exactly on strips first..last
// (bit i = strip i). Example: first 10, last 26 enables strips 10..26.
// The output is registered (one clk160 cycle).
module strip_enable_encoder
  import tds_pkg::*;
(
  input  logic                   clk160,
  input  logic                   rst_n,
  input  logic [STRIP_IDX_W-1:0] first,
  input  logic [STRIP_IDX_W-1:0] last,
  output logic [N_STRIP-1:0]     enable
);
  logic [N_STRIP-1:0] vt, vt_inv;

  always_comb begin
    for (int i = 0; i < N_STRIP; i++) begin
      vt[i]     = (i >= int'(first));
      vt_inv[i] = (i <= int'(last));
    end
  end

  always_ff @(posedge clk160 or negedge rst_n)
    if (!rst_n) enable <= '0;
    else        enable <= vt & vt_inv;
endmodule
