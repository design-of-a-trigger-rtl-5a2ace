// strip_ring_buffer: per-channel buffer and trigger matching of the strip mode,
// following the paper's ring-buffer figure. BUF0..BUF3 form a data-driven shift
// register: each new strip data unit enters BUF0 and pushes the others one step,
// the oldest falls out. A timer counts BCs since the last write and, at the
// programmable `timeout` (0 = off), pushes a NULL so that no unit stays forever.
// When `sample` is high (trigger enable of this channel) the sampling switches copy
// BUF0..3 into Reg0..3 together with the trigger BCID T. One cycle later the BCID
// comparison registers `match` and the matched 6-bit charge: an entry matches if its
// BCID equals T, or if its FLAG is set and its BCID equals T+1 (hit early in the next
// BC, inside a window longer than 25 ns). If several match, the newest wins (this
// design's choice). Latency from `sample` to `match`: 2 cycles.
module strip_ring_buffer
  import tds_pkg::*;
#(
  parameter int DEPTH   = 4,
  parameter int TIMER_W = 8
) (
  input  logic               clk160,
  input  logic               rst_n,
  input  logic               wr,
  input  strip_unit_t        unit,
  input  logic               bc_tick,
  input  logic [TIMER_W-1:0] timeout,
  input  logic               sample,
  input  logic [BCID_W-1:0]  trig_bcid,
  output logic               match,
  output logic [CHARGE_W-1:0] charge
);
  typedef struct packed {
    logic        valid;
    strip_unit_t u;
  } entry_t;

  entry_t buf_q [DEPTH];
  entry_t reg_q [DEPTH];
  logic [BCID_W-1:0] t_q;
  logic [TIMER_W-1:0] timer;
  logic push_null;
  logic m_n;
  logic [CHARGE_W-1:0] q_n;

  assign push_null = !wr && bc_tick && (timeout != '0) && (timer + 1'b1 >= timeout);

  always_comb begin
    m_n = 1'b0;
    q_n = '0;
    for (int i = DEPTH-1; i >= 0; i--) begin
      if (reg_q[i].valid &&
          (reg_q[i].u.bcid == t_q ||
           (reg_q[i].u.flag && reg_q[i].u.bcid == t_q + 1'b1))) begin
        m_n = 1'b1;
        q_n = reg_q[i].u.charge;
      end
    end
  end

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        buf_q[i] <= '0;
        reg_q[i] <= '0;
      end
      t_q    <= '0;
      timer  <= '0;
      match  <= 1'b0;
      charge <= '0;
    end else begin
      if (wr || push_null) begin
        for (int i = DEPTH-1; i > 0; i--) buf_q[i] <= buf_q[i-1];
        buf_q[0] <= '{valid: wr, u: unit};
        timer    <= '0;
      end else if (bc_tick && timer != '1) begin
        timer <= timer + 1'b1;
      end
      if (sample) begin
        for (int i = 0; i < DEPTH; i++) reg_q[i] <= buf_q[i];
        t_q <= trig_bcid;
      end else begin
        for (int i = 0; i < DEPTH; i++) reg_q[i].valid <= 1'b0;
      end
      match  <= m_n;
      charge <= q_n;
    end
  end
endmodule
