// uplink_demux: splits one decoded lpGBT uplink frame into per-TDC e-link
// bytes and the monitor field.
//
// Every 25 ns the lpGBT decoder delivers a 230-bit user frame. 160 bits carry
// the data of 10 mezzanine TDCs, 16 bits each: the TDC drives two 320 Mbps
// e-links (even and odd bits of its serial stream), i.e. 8 bits per e-link per
// frame. The remaining 70 bits carry voltage and temperature readings. The
// split itself follows the source paper; the bit positions are this design's
// choice: slot k uses frame[16k+7:16k] (even) and frame[16k+15:16k+8] (odd),
// the monitor field is frame[229:160].
// Timing: one register stage; outputs valid the cycle after frame_valid.
module uplink_demux
  import minidaq_pkg::*;
#(
  parameter int unsigned N_SLOT = 10
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [FRAME_W-1:0]   frame,
  input  logic                 frame_valid,
  output logic [N_SLOT-1:0][7:0] slot_even,
  output logic [N_SLOT-1:0][7:0] slot_odd,
  output logic [MON_W-1:0]     mon,
  output logic                 slot_valid
);
  always_ff @(posedge clk) begin
    if (rst) begin
      slot_even  <= '0;
      slot_odd   <= '0;
      mon        <= '0;
      slot_valid <= 1'b0;
    end else begin
      slot_valid <= frame_valid;
      if (frame_valid) begin
        for (int k = 0; k < N_SLOT; k++) begin
          slot_even[k] <= frame[16*k +: 8];
          slot_odd[k]  <= frame[16*k+8 +: 8];
        end
        mon <= frame[FRAME_W-1 -: MON_W];
      end
    end
  end
endmodule
