// uart_tx: serial transmitter for replies to the PC over the USB-UART bridge.
//
// 8N1 format, CLKS_PER_BIT cycles per bit, line idle high. A byte is taken
// when valid && ready; ready stays low for the 10 bit times of the frame.
// Format and baud rate are this design's choices.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 347
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       tx
);
  logic [9:0] sh;        // stop, data[7:0], start; bit 0 goes out first
  logic [3:0] nbits;     // bits left to send
  logic [$clog2(CLKS_PER_BIT)-1:0] ctr;

  assign ready = (nbits == 4'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      sh    <= '1;
      nbits <= '0;
      ctr   <= '0;
      tx    <= 1'b1;
    end else if (ready) begin
      tx <= 1'b1;
      if (valid) begin
        sh    <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        ctr   <= '0;
        tx    <= 1'b0;
      end
    end else begin
      if (ctr == ($bits(ctr))'(CLKS_PER_BIT - 1)) begin
        ctr   <= '0;
        nbits <= nbits - 1'b1;
        sh    <= {1'b1, sh[9:1]};
        tx    <= (nbits == 4'd1) ? 1'b1 : sh[1];
      end else ctr <= ctr + 1'b1;
    end
  end
endmodule
