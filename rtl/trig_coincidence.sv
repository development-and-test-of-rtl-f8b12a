// trig_coincidence: coincidence of the scintillator trigger inputs.
//
// Up to four PMT signals pass through on-board comparators; the FPGA samples
// each comparator output in 32 sub-bins of 0.78125 ns per 25 ns bunch (the
// multi-phase sampling front end). This block forms, sub-bin by sub-bin, the
// AND of the enabled inputs. With a single input enabled the block passes
// that input through, which is how an already formed external coincidence
// signal is used; with several enabled it makes the coincidence inside the
// FPGA. The two uses follow the source paper; the AND gate, the mask and
// doing it on sampled bits are this design's choices. An all-zero mask
// disables the trigger. Timing: registered, one cycle.
module trig_coincidence #(
  parameter int unsigned N_IN  = 4,
  parameter int unsigned N_SUB = 32
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [N_IN-1:0][N_SUB-1:0] samples,
  input  logic [N_IN-1:0]            mask,
  output logic [N_SUB-1:0]           coinc
);
  logic [N_SUB-1:0] c;
  always_comb begin
    c = (mask == '0) ? '0 : '1;
    for (int i = 0; i < N_IN; i++)
      if (mask[i]) c &= samples[i];
  end
  always_ff @(posedge clk) begin
    if (rst) coinc <= '0;
    else     coinc <= c;
  end
endmodule
