// hit_buffer: raw-data buffer of one TDC with outdated-hit rejection.
//
// Decoded hits are written into an on-chip RAM organised as a FIFO (oldest
// hit at the head). They wait there for the trigger, which arrives only
// after the programmed trigger latency. Hits that no trigger will ask for
// must not pile up: a comparator watches the head and, whenever the trigger
// matcher is not reading the buffer (hold low), drops the head hit once its
// age, now_time - le_time (modulo 2^17, in 0.78 ns bins), exceeds the
// programmable rejection window. The window is set from the trigger latency
// plus the matching window. Both the buffering and the age-based rejection
// are described in the source paper; depth, the age arithmetic and the
// full-buffer policy (new hits dropped, overflow pulsed) are this design's.
// At most one hit is rejected per cycle.
// Interface: head/head_valid show the oldest hit (first-word-fall-through);
// pop removes it. Timing: a written hit is at the head one cycle later if
// the buffer was empty.
module hit_buffer
  import minidaq_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic      clk,
  input  logic      rst,
  input  hit_t      wr_hit,
  input  logic      wr_en,
  input  tdc_time_t now_time,
  input  tdc_time_t reject_win,
  input  logic      hold,
  output hit_t      head,
  output logic      head_valid,
  input  logic      pop,
  output logic      rejected,
  output logic      overflow,
  output logic [AW:0] level
);
  hit_t mem [DEPTH];
  logic [AW:0] wp, rp;
  logic        full, empty, drop;
  tdc_time_t   age;

  assign level      = wp - rp;
  assign empty      = (wp == rp);
  assign full       = (level == (AW+1)'(DEPTH));
  assign head       = mem[rp[AW-1:0]];
  assign head_valid = !empty;
  assign age        = now_time - head.le_time;
  assign drop       = !empty && !hold && (age > reject_win);

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_hit;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      rejected <= 1'b0;
      overflow <= 1'b0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if ((pop || drop) && !empty) rp <= rp + 1'b1;
      rejected <= drop && !pop;
      overflow <= wr_en && full;
    end
  end

  a_pop_needs_hold: assert property (@(posedge clk) disable iff (rst) pop |-> (hold && !empty));
endmodule
