// trig_delay: programmable delay shift register for the trigger.
//
// Each 25 ns cycle the trigger valid bit and its 17-bit time enter a shift
// register of MAX_DELAY stages; the output is taken from the stage selected
// by the delay register, so a trigger leaves delay+1 cycles after it
// entered. The delay is the trigger latency: it lets all hits belonging to
// the trigger reach the hit buffers before matching starts. The shift
// register and its programmable tap follow the source paper (its trigger
// figure); the depth of 256 stages (6.4 us) is this design's choice.
module trig_delay
  import minidaq_pkg::*;
#(
  parameter int unsigned MAX_DELAY = 256
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      in_valid,
  input  tdc_time_t in_time,
  input  logic [$clog2(MAX_DELAY)-1:0] delay,
  output logic      out_valid,
  output tdc_time_t out_time
);
  logic      v_sr [MAX_DELAY];
  tdc_time_t t_sr [MAX_DELAY];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < MAX_DELAY; i++) v_sr[i] <= 1'b0;
    end else begin
      v_sr[0] <= in_valid;
      for (int i = 1; i < MAX_DELAY; i++) v_sr[i] <= v_sr[i-1];
    end
  end

  always_ff @(posedge clk) begin
    t_sr[0] <= in_time;
    for (int i = 1; i < MAX_DELAY; i++) t_sr[i] <= t_sr[i-1];
  end

  assign out_valid = v_sr[delay];
  assign out_time  = t_sr[delay];
endmodule
