// pad_ring_buffer: per-channel hit buffer and firing-status flag of the pad mode.
// Follows the paper: a 2-deep ring buffer built as a two-stage shift register.
// Each new hit BCID is written into stage 0 while stage 0 moves to stage 1 and the
// old stage 1 is dropped. A timer counts BCs since the last write; when it reaches
// the programmable `timeout` (0 disables it), a NULL (invalid entry) is pushed the
// same way, so that an old hit cannot stay in the buffer forever.
// Once per BC (cmp strobe) the BCID under test, ref_bcid, is compared with both
// entries and `flag` is registered: 1 (YES) if a valid entry has that BCID.
// Which BCID is tested and when is chosen by the caller (pad_tds); the counting of
// the timer in BCs and its 8-bit width are this design's choices.
module pad_ring_buffer
  import tds_pkg::*;
#(
  parameter int TIMER_W = 8
) (
  input  logic               clk160,
  input  logic               rst_n,
  input  logic               hit,
  input  logic [BCID_W-1:0]  hit_bcid,
  input  logic               bc_tick,    // one cycle per BC, advances the timer
  input  logic               cmp,        // compare strobe, one cycle per BC
  input  logic [BCID_W-1:0]  ref_bcid,
  input  logic [TIMER_W-1:0] timeout,
  output logic               flag
);
  typedef struct packed {
    logic              valid;
    logic [BCID_W-1:0] bcid;
  } entry_t;

  entry_t buf_q [2];
  logic [TIMER_W-1:0] timer;
  logic push_null;

  assign push_null = !hit && bc_tick && (timeout != '0) && (timer + 1'b1 >= timeout);

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      buf_q[0] <= '0;
      buf_q[1] <= '0;
      timer    <= '0;
      flag     <= 1'b0;
    end else begin
      if (hit || push_null) begin
        buf_q[1] <= buf_q[0];
        buf_q[0] <= '{valid: hit, bcid: hit_bcid};
        timer    <= '0;
      end else if (bc_tick && timer != '1) begin
        timer <= timer + 1'b1;
      end
      if (cmp)
        flag <= (buf_q[0].valid && buf_q[0].bcid == ref_bcid) ||
                (buf_q[1].valid && buf_q[1].bcid == ref_bcid);
    end
  end
endmodule
