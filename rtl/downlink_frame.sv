// downlink_frame: builds the lpGBT downlink frame sent to a CSM every 25 ns.
//
// The downlink (2.56 Gbps) carries, per frame, 32 user bits plus the 2-bit
// IC field (lpGBT internal control) and the 2-bit EC field (here: the
// GBT-SCA that turns it into JTAG for the mezzanine cards). This block
//   - puts the encoded control (ENC) command in user[7:0] for one frame:
//     bunch count reset 8'hB4, system reset 8'hE1, otherwise 8'h00;
//     the CSM fan-out FPGA passes these on to all mezzanine TDCs,
//   - shifts a loaded 32-bit configuration word out of the IC or EC field,
//     two bits per frame, most significant first (16 frames); the idle
//     value of both fields is 2'b11.
// The downlink's role (ENC for bunch count reset and system reset, and
// configuration bits) is the source paper's; the command codes and field
// use are this design's. The GBT-SCA HDLC protocol and the lpGBT IC
// protocol, which wrap configuration data in the real system, are not built.
// user[31:8] stays zero: only the ENC byte of the user field is used.
// Timing: outputs registered; a command appears one cycle after its pulse.
module downlink_frame
  import minidaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        bcr,
  input  logic        sysrst,
  input  logic [31:0] ic_word,
  input  logic        ic_load,
  input  logic [31:0] ec_word,
  input  logic        ec_load,
  output logic [31:0] user,
  output logic [1:0]  ic,
  output logic [1:0]  ec,
  output logic        busy
);
  logic [31:0] ic_sh, ec_sh;
  logic [4:0]  ic_n, ec_n;     // 2-bit groups left to send

  assign busy = (ic_n != 0) || (ec_n != 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      user  <= '0;
      ic    <= 2'b11;
      ec    <= 2'b11;
      ic_sh <= '0;
      ec_sh <= '0;
      ic_n  <= '0;
      ec_n  <= '0;
    end else begin
      user <= {24'h0, sysrst ? ENC_RST : (bcr ? ENC_BCR : ENC_IDLE)};
      if (ic_load) begin
        ic_sh <= ic_word;
        ic_n  <= 5'd16;
        ic    <= 2'b11;
      end else if (ic_n != 0) begin
        ic    <= ic_sh[31:30];
        ic_sh <= {ic_sh[29:0], 2'b00};
        ic_n  <= ic_n - 1'b1;
      end else ic <= 2'b11;
      if (ec_load) begin
        ec_sh <= ec_word;
        ec_n  <= 5'd16;
        ec    <= 2'b11;
      end else if (ec_n != 0) begin
        ec    <= ec_sh[31:30];
        ec_sh <= {ec_sh[29:0], 2'b00};
        ec_n  <= ec_n - 1'b1;
      end else ec <= 2'b11;
    end
  end
endmodule
