// fpga_tdc: time-to-digital converter for the trigger signal.
//
// Input: the coincidence signal sampled in 32 sub-bins per 25 ns bunch,
// bit 0 the earliest (these samples come from the multi-phase clock
// front end, which is not part of this module). The module finds the first
// rising edge in the bunch - a 0 to 1 step between neighbouring samples,
// including the step from the last sample of the previous bunch - and
// outputs its time as {bunch counter[11:0], sub-bin[4:0]}, the same 0.78 ns
// binning and 17-bit format as the TDC ASIC's leading-edge time, so trigger
// and hit times compare directly. The 12-bit bunch counter runs freely and is
// cleared by the bunch count reset that is also sent to the front end.
// The bin size follows the source paper; the edge finder and counter are
// this design's. At most one trigger per bunch. Timing: trig_valid one cycle
// after the bunch's samples.
module fpga_tdc
  import minidaq_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic [N_SUB-1:0] coinc,
  input  logic             bcr,
  output logic             trig_valid,
  output tdc_time_t        trig_time,
  output logic [BC_W-1:0]  bc
);
  logic             last_q;
  logic [N_SUB-1:0] rise;
  logic             any;
  logic [FINE_W-1:0] first;

  always_comb begin
    rise = coinc & ~{coinc[N_SUB-2:0], last_q};
    any  = |rise;
    first = '0;
    for (int i = N_SUB-1; i >= 0; i--)
      if (rise[i]) first = FINE_W'(i);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last_q     <= 1'b0;
      bc         <= '0;
      trig_valid <= 1'b0;
      trig_time  <= '0;
    end else begin
      last_q     <= coinc[N_SUB-1];
      bc         <= bcr ? '0 : bc + 1'b1;
      trig_valid <= any;
      trig_time  <= {bc, first};
    end
  end
endmodule
