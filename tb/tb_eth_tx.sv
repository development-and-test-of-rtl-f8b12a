// tb_eth_tx: sends events of different lengths (short ones need padding,
// a long one is split over two frames), captures the bytes on the GMII
// port and checks preamble, SFD, MAC addresses, EtherType, payload bytes,
// padding to 46 bytes, the CRC-32 frame check sequence (recomputed here) and
// the 12-cycle inter-frame gap. Also checks that a frame of n payload bytes
// occupies exactly 8 + 14 + max(n,46) + 4 cycles of tx_en.
module tb_eth_tx;
  import minidaq_pkg::*;
  import tb_util_pkg::*;
  localparam int MAXW = 20;
  logic clk = 0, rst = 1;
  logic [39:0] in_word;
  logic in_valid, in_last, in_ready, tx_en;
  logic [7:0] txd;
  logic [31:0] frames;
  logic [7:0] cur[$];
  logic [7:0] exp_pay[$][$];
  int checks = 0, failures = 0, nframes = 0, gap = 0, min_gap = 1000;

  eth_tx #(.MAX_WORDS(MAXW)) dut (.clk, .rst, .in_word, .in_valid, .in_last, .in_ready, .txd, .tx_en, .frames);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_frame(logic [7:0] f[$]);
    logic [7:0] body[$];
    logic [7:0] pay[$];
    logic [7:0] e[$];
    logic [31:0] fcs, c;
    int n;
    e = exp_pay.pop_front();
    n = (e.size() < 46) ? 46 : e.size();
    checks++;
    if (f.size() != 8 + 14 + n + 4) begin failures++; $display("frame length %0d exp %0d", f.size(), 8 + 14 + n + 4); return; end
    for (int i = 0; i < 7; i++) if (f[i] != 8'h55) begin failures++; $display("preamble"); end
    checks++;
    if (f[7] != 8'hD5) begin failures++; $display("SFD"); end
    for (int i = 8; i < f.size() - 4; i++) body.push_back(f[i]);
    checks += 3;
    if ({body[0], body[1], body[2], body[3], body[4], body[5]} != 48'hFFFF_FFFF_FFFF) begin failures++; $display("dst"); end
    if ({body[6], body[7], body[8], body[9], body[10], body[11]} != 48'h0200_0000_0001) begin failures++; $display("src"); end
    if ({body[12], body[13]} != 16'h88B5) begin failures++; $display("ethertype"); end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (body[14 + i] != ((i < e.size()) ? e[i] : 8'h00)) begin failures++; $display("payload byte %0d", i); end
    end
    c = crc32(body);
    fcs = {f[f.size()-1], f[f.size()-2], f[f.size()-3], f[f.size()-4]};
    checks++;
    if (fcs != c) begin failures++; $display("fcs %h exp %h", fcs, c); end
  endtask

  always @(negedge clk) if (!rst) begin
    if (tx_en) begin
      if (cur.size() == 0 && nframes > 0) min_gap = (gap < min_gap) ? gap : min_gap;
      cur.push_back(txd);
      gap = 0;
    end else begin
      gap++;
      if (cur.size() != 0) begin check_frame(cur); cur.delete(); nframes++; end
    end
  end

  task automatic send_event(int nw);
    logic [7:0] p[$];
    for (int w = 0; w < nw; w++) begin
      logic [39:0] v;
      v = {8'($urandom), 32'($urandom)};
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_word = v; in_valid = 1; in_last = (w == nw - 1);
      for (int b = 4; b >= 0; b--) p.push_back(v[8*b +: 8]);
      if (p.size() == MAXW * 5 || w == nw - 1) begin exp_pay.push_back(p); p = {}; end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      #1;
    end
  endtask

  initial begin
    in_word = 0; in_valid = 0; in_last = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    send_event(2);      // 10 bytes -> padded
    send_event(9);      // 45 bytes -> 1 pad byte
    send_event(10);     // 50 bytes
    send_event(33);     // split: 20 + 13 words
    send_event(1);
    repeat (600) @(negedge clk);
    checks += 3;
    if (nframes != 6) begin failures++; $display("frames %0d", nframes); end
    if (frames != 6) begin failures++; $display("frame counter %0d", frames); end
    if (min_gap < 12) begin failures++; $display("gap %0d", min_gap); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
