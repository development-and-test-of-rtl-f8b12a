// eth_tx: sends events to the data-taking PC as raw Ethernet frames.
//
// Event words (40 bits) are first collected in a frame buffer until the
// event's trailer arrives (in_last) or the buffer holds MAX_WORDS words;
// then the frame goes out one byte per clock on a GMII-style interface
// (txd, tx_en) to the gigabit Ethernet PHY:
//   7 x 8'h55 preamble, 8'hD5 start delimiter,
//   destination MAC, source MAC, EtherType (most significant byte first),
//   payload: each event word as 5 bytes, most significant first,
//   zero padding up to the 46-byte minimum payload,
//   frame check sequence: CRC-32 (IEEE 802.3, reflected polynomial
//   32'hEDB88320, preset all ones, inverted), least significant byte first,
// followed by a 12-byte inter-frame gap with tx_en low. An event longer than
// MAX_WORDS continues in the next frame. While a frame is being sent,
// in_ready is low. Sending events to the PC over gigabit Ethernet is the
// source paper's; framing as raw Ethernet II with EtherType 16'h88B5 (local
// experimental), the MAC addresses and one event per frame are this
// design's. The PHY's 125 MHz byte clock is taken to be clk here.
module eth_tx
  import minidaq_pkg::*;
#(
  parameter int unsigned MAX_WORDS = 296,
  parameter logic [47:0] DST_MAC   = 48'hFFFF_FFFF_FFFF,
  parameter logic [47:0] SRC_MAC   = 48'h0200_0000_0001,
  parameter logic [15:0] ETHERTYPE = 16'h88B5,
  localparam int unsigned AW = $clog2(MAX_WORDS + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [EVT_W-1:0] in_word,
  input  logic             in_valid,
  input  logic             in_last,
  output logic             in_ready,
  output logic [7:0]       txd,
  output logic             tx_en,
  output logic [31:0]      frames
);
  typedef enum logic [2:0] {S_FILL, S_PRE, S_HDR, S_PAY, S_PAD, S_FCS, S_IFG} state_t;
  state_t state;

  logic [EVT_W-1:0] fbuf [MAX_WORDS];
  logic [AW-1:0]    nwords;     // words in the buffer
  logic [AW-1:0]    widx;       // payload word being sent
  logic [2:0]       bsub;       // byte within word, 0 = most significant
  logic [10:0]      cnt;        // byte counter within a state
  logic [10:0]      paylen;     // payload bytes sent so far
  logic [31:0]      crc;
  logic [7:0]       byte_n;
  logic             crc_en;
  logic [111:0]     hdr;

  assign hdr      = {DST_MAC, SRC_MAC, ETHERTYPE};
  assign in_ready = (state == S_FILL);

  function automatic logic [31:0] crc32_byte(input logic [31:0] c, input logic [7:0] d);
    logic [31:0] r;
    r = c;
    for (int i = 0; i < 8; i++)
      r = (r[0] ^ d[i]) ? ((r >> 1) ^ 32'hEDB88320) : (r >> 1);
    return r;
  endfunction

  // byte on the line this cycle
  always_comb begin
    byte_n = 8'h00;
    crc_en = 1'b0;
    unique case (state)
      S_PRE: byte_n = (cnt == 11'd7) ? 8'hD5 : 8'h55;
      S_HDR: begin byte_n = hdr[8*(13 - int'(cnt)) +: 8]; crc_en = 1'b1; end
      S_PAY: begin byte_n = fbuf[widx][8*(4 - int'(bsub)) +: 8]; crc_en = 1'b1; end
      S_PAD: begin byte_n = 8'h00; crc_en = 1'b1; end
      S_FCS: byte_n = ~crc[8*int'(cnt[1:0]) +: 8];
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) fbuf[nwords] <= in_word;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_FILL;
      nwords <= '0;
      widx   <= '0;
      bsub   <= '0;
      cnt    <= '0;
      paylen <= '0;
      crc    <= '1;
      txd    <= '0;
      tx_en  <= 1'b0;
      frames <= '0;
    end else begin
      txd   <= byte_n;
      tx_en <= (state != S_FILL) && (state != S_IFG);
      if (crc_en) crc <= crc32_byte(crc, byte_n);
      unique case (state)
        S_FILL: if (in_valid) begin
          nwords <= nwords + 1'b1;
          if (in_last || nwords == AW'(MAX_WORDS - 1)) begin
            state <= S_PRE;
            cnt   <= '0;
          end
        end
        S_PRE: begin
          cnt <= cnt + 1'b1;
          if (cnt == 11'd7) begin
            state <= S_HDR;
            cnt   <= '0;
            crc   <= '1;
          end
        end
        S_HDR: begin
          cnt <= cnt + 1'b1;
          if (cnt == 11'd13) begin
            state  <= S_PAY;
            widx   <= '0;
            bsub   <= '0;
            paylen <= '0;
          end
        end
        S_PAY: begin
          paylen <= paylen + 1'b1;
          if (bsub == 3'd4) begin
            bsub <= '0;
            widx <= widx + 1'b1;
            if (widx == nwords - 1'b1)
              state <= (paylen + 11'd1 < 11'd46) ? S_PAD : S_FCS;
          end else begin
            bsub <= bsub + 1'b1;
          end
          cnt <= '0;
        end
        S_PAD: begin
          paylen <= paylen + 1'b1;
          if (paylen == 11'd45) begin
            state <= S_FCS;
            cnt   <= '0;
          end
        end
        S_FCS: begin
          cnt <= cnt + 1'b1;
          if (cnt == 11'd3) begin
            state <= S_IFG;
            cnt   <= '0;
            frames <= frames + 1'b1;
          end
        end
        S_IFG: begin
          cnt <= cnt + 1'b1;
          if (cnt == 11'd11) begin
            state  <= S_FILL;
            nwords <= '0;
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end
endmodule
