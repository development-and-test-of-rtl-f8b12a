// trigger_dispatch: hands each trigger to all TDC matchers at once.
//
// Matching runs in parallel, one matcher per TDC. The dispatcher waits until
// a trigger is in the trigger FIFO, every matcher is idle and the event
// header queue has room; then, in one cycle, it pops the trigger, pulses
// start with the trigger time to all matchers and queues {event number,
// trigger time} for the event builder. The 12-bit event number counts from
// reset. A busy matcher needs one cycle after start to raise busy, so the
// dispatcher leaves a one-cycle gap after each start. Parallel matching per
// uplink is from the source paper; the broadcast scheme is this design's.
// start_time is the trigger FIFO's head passed straight through (the FIFO
// output is already a register), so those outputs carry no logic here.
module trigger_dispatch
  import minidaq_pkg::*;
#(
  parameter int unsigned N_TDC = 40
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                trig_valid,
  input  tdc_time_t           trig_time,
  output logic                trig_pop,
  input  logic [N_TDC-1:0]    busy,
  output logic                start,
  output tdc_time_t           start_time,
  output logic                evt_wr,
  output logic [EVT_ID_W-1:0] evt_id,
  input  logic                evt_full
);
  logic gap_q;
  logic [EVT_ID_W-1:0] id_q;

  assign start      = trig_valid && !gap_q && (busy == '0) && !evt_full;
  assign trig_pop   = start;
  assign evt_wr     = start;
  assign start_time = trig_time;
  assign evt_id     = id_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      gap_q <= 1'b0;
      id_q  <= '0;
    end else begin
      gap_q <= start;
      if (start) id_q <= id_q + 1'b1;
    end
  end
endmodule
