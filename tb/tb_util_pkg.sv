// tb_util_pkg: shared testbench helpers.
//   enc8b10b()  reference 8b/10b encoder with running disparity (table
//               form of IEEE 802.3 clause 36), used to build TDC streams,
//   tdc_word()  packs a hit into the TDC's 32-bit output word,
//   crc32()     bitwise CRC-32 for Ethernet frame checks.
// Code bits are returned in line order: bit 0 = 'a' is sent first.
package tb_util_pkg;

  function automatic logic [5:0] tab6(input logic [4:0] x);  // RD- form, a in bit 5
    logic [5:0] t [32] = '{
      6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
      6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
      6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
      6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011};
    return t[x];
  endfunction

  function automatic int ones(input logic [9:0] v, input int n);
    int c = 0;
    for (int i = 0; i < n; i++) c += v[i];
    return c;
  endfunction

  // rd: 0 = negative running disparity, 1 = positive
  function automatic logic [9:0] enc8b10b(input logic [7:0] d, input logic k, inout logic rd);
    logic [4:0] x;
    logic [2:0] y;
    logic [5:0] s6;
    logic [3:0] s4;
    logic [9:0] out;
    int n6, n4;
    x = d[4:0];
    y = d[7:5];
    if (k) s6 = 6'b001111;               // only K28.y is used
    else   s6 = tab6(x);
    n6 = ones({4'b0, s6}, 6);
    if (rd && (n6 != 3 || s6 == 6'b111000)) s6 = ~s6;
    if (n6 != 3) rd = ~rd;
    // 3b/4b, RD- forms, f in bit 3
    if (k) begin
      case (y)
        3'd0: s4 = 4'b0100; 3'd1: s4 = 4'b1001; 3'd2: s4 = 4'b0101; 3'd3: s4 = 4'b0011;
        3'd4: s4 = 4'b0010; 3'd5: s4 = 4'b1010; 3'd6: s4 = 4'b0110; default: s4 = 4'b1000;
      endcase
      // K28 4-bit block is chosen by the disparity after the 6-bit block
      if (rd == 1'b0) s4 = ~s4;
      if (ones({6'b0, s4}, 4) != 2) rd = ~rd;
    end else begin
      case (y)
        3'd0: s4 = 4'b1011; 3'd1: s4 = 4'b1001; 3'd2: s4 = 4'b0101; 3'd3: s4 = 4'b1100;
        3'd4: s4 = 4'b1101; 3'd5: s4 = 4'b1010; 3'd6: s4 = 4'b0110;
        default: s4 = ((!rd && (x == 17 || x == 18 || x == 20)) ||
                       ( rd && (x == 11 || x == 13 || x == 14))) ? 4'b0111 : 4'b1110;
      endcase
      n4 = ones({6'b0, s4}, 4);
      if (rd && (n4 != 2 || s4 == 4'b1100)) s4 = ~s4;
      if (n4 != 2) rd = ~rd;
    end
    for (int i = 0; i < 6; i++) out[i]     = s6[5-i];
    for (int i = 0; i < 4; i++) out[6 + i] = s4[3-i];
    return out;
  endfunction

  function automatic logic [31:0] tdc_word(input logic [4:0] chan, input logic [16:0] t,
                                           input logic [7:0] width);
    return {chan, 2'b10, t, width};
  endfunction

  function automatic logic [31:0] crc32(input logic [7:0] bytes[$]);
    logic [31:0] c = '1;
    foreach (bytes[j])
      for (int i = 0; i < 8; i++)
        c = (c[0] ^ bytes[j][i]) ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return ~c;
  endfunction

endpackage
