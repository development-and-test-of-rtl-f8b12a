// dec8b10b: combinational 8b/10b character decoder (IEEE 802.3 clause 36
// code tables, the code used by the MDT TDC output).
//
// Input code[0] is bit 'a', the first bit on the line, code[9] is bit 'j'.
// Output: the decoded byte HGFEDCBA, a flag for control (K) characters and a
// flag for characters outside the code. Running disparity is not checked:
// both disparity forms of each character are accepted. Any character whose
// 6-bit block is the K28 pattern is reported as control; other K characters
// (K23/27/29/30.7) decode as data with the alternate 3b/4b form.
module dec8b10b (
  input  logic [9:0] code,
  output logic [7:0] data,
  output logic       is_k,
  output logic       err
);
  logic [5:0] s6;   // abcdei, a in bit 5
  logic [3:0] s4;   // fghj,   f in bit 3
  logic [4:0] x5;
  logic [2:0] y3;
  logic       e6, e4, k28;

  assign s6 = {code[0], code[1], code[2], code[3], code[4], code[5]};
  assign s4 = {code[6], code[7], code[8], code[9]};

  always_comb begin
    e6 = 1'b0;
    k28 = 1'b0;
    unique case (s6)
      6'b100111, 6'b011000: x5 = 5'd0;
      6'b011101, 6'b100010: x5 = 5'd1;
      6'b101101, 6'b010010: x5 = 5'd2;
      6'b110001:            x5 = 5'd3;
      6'b110101, 6'b001010: x5 = 5'd4;
      6'b101001:            x5 = 5'd5;
      6'b011001:            x5 = 5'd6;
      6'b111000, 6'b000111: x5 = 5'd7;
      6'b111001, 6'b000110: x5 = 5'd8;
      6'b100101:            x5 = 5'd9;
      6'b010101:            x5 = 5'd10;
      6'b110100:            x5 = 5'd11;
      6'b001101:            x5 = 5'd12;
      6'b101100:            x5 = 5'd13;
      6'b011100:            x5 = 5'd14;
      6'b010111, 6'b101000: x5 = 5'd15;
      6'b011011, 6'b100100: x5 = 5'd16;
      6'b100011:            x5 = 5'd17;
      6'b010011:            x5 = 5'd18;
      6'b110010:            x5 = 5'd19;
      6'b001011:            x5 = 5'd20;
      6'b101010:            x5 = 5'd21;
      6'b011010:            x5 = 5'd22;
      6'b111010, 6'b000101: x5 = 5'd23;
      6'b110011, 6'b001100: x5 = 5'd24;
      6'b100110:            x5 = 5'd25;
      6'b010110:            x5 = 5'd26;
      6'b110110, 6'b001001: x5 = 5'd27;
      6'b001110:            x5 = 5'd28;
      6'b101110, 6'b010001: x5 = 5'd29;
      6'b011110, 6'b100001: x5 = 5'd30;
      6'b101011, 6'b010100: x5 = 5'd31;
      6'b001111, 6'b110000: begin x5 = 5'd28; k28 = 1'b1; end
      default:              begin x5 = 5'd0;  e6  = 1'b1; end
    endcase
  end

  always_comb begin
    e4 = 1'b0;
    if (k28) begin
      // K28.y: the 4-bit block depends on the disparity of the 6-bit block.
      unique case (s6 == 6'b110000 ? s4 : ~s4)
        4'b1011: y3 = 3'd0;
        4'b0110: y3 = 3'd1;
        4'b1010: y3 = 3'd2;
        4'b1100: y3 = 3'd3;
        4'b1101: y3 = 3'd4;
        4'b0101: y3 = 3'd5;
        4'b1001: y3 = 3'd6;
        4'b0111: y3 = 3'd7;
        default: begin y3 = 3'd0; e4 = 1'b1; end
      endcase
    end else begin
      unique case (s4)
        4'b1011, 4'b0100: y3 = 3'd0;
        4'b1001:          y3 = 3'd1;
        4'b0101:          y3 = 3'd2;
        4'b1100, 4'b0011: y3 = 3'd3;
        4'b1101, 4'b0010: y3 = 3'd4;
        4'b1010:          y3 = 3'd5;
        4'b0110:          y3 = 3'd6;
        4'b1110, 4'b0001, 4'b0111, 4'b1000: y3 = 3'd7;
        default:          begin y3 = 3'd0; e4 = 1'b1; end
      endcase
    end
  end

  assign data = {y3, x5};
  assign is_k = k28;
  assign err  = e6 | e4;
endmodule
