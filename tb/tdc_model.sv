// tdc_model: behavioural model of an MDT TDC ASIC output (testbench only).
// A 32-bit hit word presented with push is queued and sent as four 8b/10b
// data characters, most significant byte first; otherwise the model sends
// K28.5 idle characters. Each frame strobe it emits the next 16 line bits,
// even bits on even_byte and odd bits on odd_byte, like the TDC's two
// 320 Mbps e-links. START_PHASE random bits are sent first so the receiver
// has to find the character boundary.
module tdc_model #(
  parameter int START_PHASE = 3
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        frame_strobe,
  input  logic        push,
  input  logic [31:0] word,
  output logic [7:0]  even_byte,
  output logic [7:0]  odd_byte
);
  import tb_util_pkg::*;
  logic bits[$];
  logic rd;
  logic [31:0] pend[$];

  task automatic put_char(logic [7:0] d, logic k);
    logic [9:0] c;
    c = enc8b10b(d, k, rd);
    for (int i = 0; i < 10; i++) bits.push_back(c[i]);
  endtask

  initial begin
    rd = 0;
    for (int i = 0; i < START_PHASE; i++) bits.push_back(1'b1);
  end

  always @(posedge clk) begin
    if (push) pend.push_back(word);
    if (!rst && frame_strobe) begin
      while (bits.size() < 16) begin
        if (pend.size() != 0) begin
          logic [31:0] w;
          w = pend.pop_front();
          for (int b = 3; b >= 0; b--) put_char(w[8*b +: 8], 1'b0);
        end else put_char(8'hBC, 1'b1);
      end
      for (int i = 0; i < 8; i++) begin
        even_byte[i] <= bits.pop_front();
        odd_byte[i]  <= bits.pop_front();
      end
    end
  end
endmodule
