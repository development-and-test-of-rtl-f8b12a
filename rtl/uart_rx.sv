// uart_rx: serial receiver for the command link from the USB-UART bridge.
//
// 8N1 format (start bit low, 8 data bits least significant first, one stop
// bit), CLKS_PER_BIT clock cycles per bit (347 = 40 MHz / 115200 baud).
// The line passes a two-flop synchronizer; a falling edge starts a byte,
// each bit is sampled in its middle, and a byte whose stop bit is high is
// delivered with a one-cycle valid pulse. A low stop bit drops the byte.
// The USB-UART command path is from the source paper; format and baud rate
// are this design's.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 347
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rx,
  output logic [7:0] data,
  output logic       valid
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;
  state_t state;
  logic [1:0]  sync;
  logic [$clog2(CLKS_PER_BIT)-1:0] ctr;
  logic [2:0]  bitn;
  logic [7:0]  sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync  <= 2'b11;
      state <= S_IDLE;
      ctr   <= '0;
      bitn  <= '0;
      sh    <= '0;
      data  <= '0;
      valid <= 1'b0;
    end else begin
      sync  <= {sync[0], rx};
      valid <= 1'b0;
      unique case (state)
        S_IDLE: if (!sync[1]) begin
          state <= S_START;
          ctr   <= '0;
        end
        S_START: if (ctr == ($bits(ctr))'(CLKS_PER_BIT/2 - 1)) begin
          ctr   <= '0;
          bitn  <= '0;
          state <= sync[1] ? S_IDLE : S_DATA;   // glitch: back to idle
        end else ctr <= ctr + 1'b1;
        S_DATA: if (ctr == ($bits(ctr))'(CLKS_PER_BIT - 1)) begin
          ctr <= '0;
          sh  <= {sync[1], sh[7:1]};
          bitn <= bitn + 1'b1;
          if (bitn == 3'd7) state <= S_STOP;
        end else ctr <= ctr + 1'b1;
        S_STOP: if (ctr == ($bits(ctr))'(CLKS_PER_BIT - 1)) begin
          state <= S_IDLE;
          if (sync[1]) begin
            data  <= sh;
            valid <= 1'b1;
          end
        end else ctr <= ctr + 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
