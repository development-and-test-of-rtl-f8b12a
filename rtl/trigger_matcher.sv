// trigger_matcher: trigger matching for one TDC.
//
// When the dispatcher broadcasts a trigger (start), the matcher takes over
// the head of its TDC's hit buffer and walks through the hits in arrival
// order. With d = le_time - trig_time + match_offset (modulo 2^17, read as a
// signed number):
//   d < 0               the hit is older than the window: discard it,
//   0 <= d < match_win  the hit belongs to this trigger: copy it to the
//                       matched-data FIFO and remove it,
//   d >= match_win      the hit is later than the window: stop and leave it.
// The scan also stops when the buffer is empty; the trigger latency upstream
// guarantees that all hits of the window have arrived by then. Each trigger
// ends with an end-of-trigger marker in the matched-data FIFO, so the event
// builder knows where this TDC's contribution ends.
// The comparison of leading-edge times inside a window relative to the
// trigger is the source paper's; the window arithmetic, the in-order scan and
// the end marker are this design's choices. Each hit goes to at most one
// trigger. Timing: one hit per cycle while out_ready is high; busy is high
// from the cycle after start until the marker is written.
module trigger_matcher
  import minidaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  tdc_time_t   trig_time,
  input  tdc_time_t   match_offset,
  input  tdc_time_t   match_win,
  input  hit_t        head,
  input  logic        head_valid,
  output logic        pop,
  output logic        busy,
  output match_word_t out_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        early_drop
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_EOT} state_t;
  state_t    state;
  tdc_time_t ttime;
  tdc_time_t d;
  logic      in_win, too_early;

  assign d         = head.le_time - ttime + match_offset;
  assign too_early = d[TIME_W-1];
  assign in_win    = !too_early && (d < match_win);
  assign busy      = (state != S_IDLE);

  always_comb begin
    pop        = 1'b0;
    out_valid  = 1'b0;
    out_data   = '{eot: 1'b0, hit: head};
    early_drop = 1'b0;
    unique case (state)
      S_SCAN: if (head_valid) begin
        if (too_early) begin
          pop        = 1'b1;
          early_drop = 1'b1;
        end else if (in_win) begin
          out_valid = 1'b1;
          pop       = out_ready;
        end
      end
      S_EOT: begin
        out_valid = 1'b1;
        out_data  = '{eot: 1'b1, hit: '0};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      ttime <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          ttime <= trig_time;
          state <= S_SCAN;
        end
        S_SCAN: if (!head_valid || (!too_early && !in_win)) state <= S_EOT;
        S_EOT:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (rst) start |-> !busy);
endmodule
