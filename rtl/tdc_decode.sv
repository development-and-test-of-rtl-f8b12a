// tdc_decode: receiver for one MDT TDC ASIC output stream.
//
// The TDC sends an 8b/10b coded stream split over two 320 Mbps e-links, one
// carrying the even bits and one the odd bits; each 25 ns frame brings 8 bits
// of each. This block
//   1. interleaves the two bytes back into 16 consecutive stream bits
//      (even_byte[i] is stream bit 2i, odd_byte[i] is bit 2i+1),
//   2. finds the 10-bit character boundary by searching for the K28.5 comma
//      that the TDC sends as its idle word, then cuts 1 or 2 characters per
//      frame from a small bit buffer (16 bits in, 10 bits per character),
//   3. decodes the characters (dec8b10b), drops idle/control characters and
//   4. packs 4 data bytes, most significant first, into a 32-bit TDC word:
//      channel[31:27], mode[26:25], coarse time[24:13], fine time[12:8],
//      width[7:0]. The mode bits are dropped.
// The even/odd split, the 8b/10b code and the idle-word removal follow the
// source paper; the bit orders and the word layout are this design's
// choices (taken from the TDC ASIC's published triggerless format).
// A character outside the code clears the lock, discards a partly assembled
// word and pulses code_err; alignment is then searched again.
// Timing: a hit leaves two cycles after the frame that completes it.
module tdc_decode
  import minidaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  even_byte,
  input  logic [7:0]  odd_byte,
  input  logic        in_valid,
  output hit_t        hit,
  output logic        hit_valid,
  output logic        locked,
  output logic        code_err,
  output logic [31:0] hit_count
);
  // ---------------- stage 1: interleave, align, cut characters -------------
  logic [15:0] merged;
  logic [24:0] bbuf;       // leftover stream bits, oldest in bit 0
  logic [4:0]  bcnt;       // number of valid bits in bbuf (0..9 when locked)
  logic [40:0] wide;       // bbuf plus the new 16 bits
  logic [5:0]  total;
  logic        lock_q;
  logic        found;
  logic [4:0]  found_at;
  logic [40:0] shifted;
  logic [5:0]  avail;
  logic [9:0]  c0_q, c1_q;
  logic [1:0]  nch_q;
  logic        unlock_req;

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      merged[2*i]   = even_byte[i];
      merged[2*i+1] = odd_byte[i];
    end
    wide  = 41'(bbuf) | (41'(merged) << bcnt);
    total = 6'(bcnt) + 6'd16;
    found = 1'b0;
    found_at = '0;
    for (int o = 15; o >= 0; o--) begin
      if (6'(o) + 6'd10 <= total &&
          (wide[o +: 10] == K285_NEG || wide[o +: 10] == K285_POS)) begin
        found = 1'b1;
        found_at = 5'(o);
      end
    end
    // drop the bits in front of the comma when locking
    shifted = (lock_q && !unlock_req) ? wide : (found ? (wide >> found_at) : wide);
    avail   = (lock_q && !unlock_req) ? total : (found ? total - 6'(found_at) : total);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      bbuf   <= '0;
      bcnt   <= '0;
      lock_q <= 1'b0;
      nch_q  <= '0;
      c0_q   <= '0;
      c1_q   <= '0;
    end else begin
      nch_q <= '0;
      if (unlock_req && !in_valid) lock_q <= 1'b0;
      if (in_valid) begin
        c0_q <= shifted[9:0];
        c1_q <= shifted[19:10];
        if ((lock_q && !unlock_req) || found) begin
          lock_q <= 1'b1;
          if (avail >= 6'd20) begin
            nch_q <= 2'd2;
            bbuf  <= 25'(shifted >> 20);
            bcnt  <= 5'(avail - 6'd20);
          end else begin
            nch_q <= 2'd1;
            bbuf  <= 25'(shifted >> 10);
            bcnt  <= 5'(avail - 6'd10);
          end
        end else begin
          // no comma yet: keep the last 9 bits, a comma may start there
          lock_q <= 1'b0;
          bbuf   <= 25'(wide >> (total - 6'd9));
          bcnt   <= 5'd9;
        end
      end
    end
  end

  // ---------------- stage 2: decode and assemble words ---------------------
  logic [7:0] d0, d1;
  logic       k0, k1, e0, e1;
  dec8b10b u_dec0 (.code(c0_q), .data(d0), .is_k(k0), .err(e0));
  dec8b10b u_dec1 (.code(c1_q), .data(d1), .is_k(k1), .err(e1));

  logic [23:0] acc_q;      // bytes received so far of the current word
  logic [1:0]  nb_q;       // how many
  logic [23:0] acc_n;
  logic [1:0]  nb_n;
  logic        done_n, err_n;
  logic [31:0] word_n;

  always_comb begin
    acc_n  = acc_q;
    nb_n   = nb_q;
    done_n = 1'b0;
    err_n  = 1'b0;
    word_n = '0;
    for (int c = 0; c < 2; c++) begin
      if (2'(c) < nch_q && !err_n) begin
        if ((c == 0) ? e0 : e1) begin
          err_n = 1'b1;
          nb_n  = '0;
        end else if ((c == 0) ? k0 : k1) begin
          nb_n = '0;                       // idle: word boundary
        end else if (nb_n == 2'd3) begin
          word_n = {acc_n, (c == 0) ? d0 : d1};
          done_n = 1'b1;
          nb_n   = '0;
        end else begin
          acc_n = {acc_n[15:0], (c == 0) ? d0 : d1};
          nb_n  = nb_n + 2'd1;
        end
      end
    end
  end

  assign unlock_req = err_n;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_q     <= '0;
      nb_q      <= '0;
      hit       <= '0;
      hit_valid <= 1'b0;
      code_err  <= 1'b0;
      hit_count <= '0;
    end else begin
      acc_q     <= acc_n;
      nb_q      <= nb_n;
      hit_valid <= done_n;
      code_err  <= err_n;
      if (done_n) begin
        hit.chan    <= word_n[31:27];
        hit.le_time <= word_n[24:8];
        hit.width   <= word_n[7:0];
        hit_count   <= hit_count + 32'd1;
      end
    end
  end

  assign locked = lock_q;
endmodule
