// pad_frame_builder: pad-mode "Frame Builder".
// At each BC the 12-bit BCID and the 104 firing flags form a 116-bit packet
// {bcid, flags[103:0]}. The packet is cut into a 26-bit frame followed by three
// 30-bit frames, sent one per clk160 cycle, so that 4 x 30 = 120 bits leave every
// 25 ns. The 26-bit frame goes out in bits 25:0 with `hdr`=1: the scrambler keeps
// bits 29:26 for the header 1010 and scrambles only the 26 data bits; the other
// frames are scrambled whole. The split (26 + 3x30) and header follow the paper;
// the bit order inside the packet is this design's choice.
// Timing: `load` captures a packet; the next four cycles carry frames 0..3 (two
// register stages after the flags, matching the 12.5 ns of the paper's latency
// table). Without a load, the frames keep cycling through the last packet.
module pad_frame_builder
  import tds_pkg::*;
(
  input  logic                clk160,
  input  logic                rst_n,
  input  logic                load,
  input  logic [N_PAD-1:0]    flags,
  input  logic [BCID_W-1:0]   bcid,
  output logic [FRAME_W-1:0]  frame,
  output logic                hdr     // frame 0: bits 29:26 are the header
);
  localparam int PKT_W = BCID_W + N_PAD;  // 116
  logic [PKT_W-1:0] pkt;
  logic [1:0] idx;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      pkt   <= '0;
      idx   <= '0;
      frame <= '0;
      hdr   <= 1'b0;
    end else begin
      if (load) begin
        pkt <= {bcid, flags};
        idx <= 2'd0;
      end else begin
        idx <= idx + 2'd1;
      end
      hdr   <= (idx == 2'd0);
      unique case (idx)
        2'd0: frame <= {HDR_DATA, pkt[115:90]};
        2'd1: frame <= pkt[89:60];
        2'd2: frame <= pkt[59:30];
        default: frame <= pkt[29:0];
      endcase
    end
  end
endmodule
