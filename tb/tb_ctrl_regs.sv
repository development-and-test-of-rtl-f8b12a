// tb_ctrl_regs: byte-level command tests. Checks reset values, write then
// read-back of every configuration register, the 'K' acknowledge, the
// one-cycle ENC command pulses, the configuration-word load pulses, and the
// read-back of identifier, monitor words, hit counters and status inputs.
// Unknown command bytes must be ignored.
module tb_ctrl_regs;
  import minidaq_pkg::*;
  localparam int NU = 2, NT = 4;
  logic clk = 0, rst = 1;
  logic [7:0] rx_data, tx_data;
  logic rx_valid, tx_valid, tx_ready;
  cfg_t cfg;
  logic bcr_pulse, rst_pulse, ic_load, ec_load;
  logic [31:0] ic_word, ec_word, status, trig_count, evt_count, rej_count, early_count, frame_count;
  logic [NU-1:0][69:0] mon;
  logic [NT-1:0][31:0] hit_count;
  logic [7:0] txq[$];
  int checks = 0, failures = 0, nbcr = 0, nrst = 0, nic = 0, nec = 0;

  ctrl_regs #(.N_UPLINK(NU), .N_TDC(NT)) dut (.clk, .rst, .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready, .cfg,
    .bcr_pulse, .rst_pulse, .ic_word, .ic_load, .ec_word, .ec_load, .mon, .hit_count, .status, .trig_count, .evt_count,
    .rej_count, .early_count, .frame_count);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reply sink: ready now and then, like a UART transmitter
  logic take_s;
  logic [7:0] byte_s;
  always @(posedge clk) begin
    take_s <= tx_valid && tx_ready;
    byte_s <= tx_data;
  end
  always @(negedge clk) if (!rst) begin
    if (take_s) txq.push_back(byte_s);
    tx_ready = ($urandom_range(0, 2) == 0);
    if (bcr_pulse) nbcr++;
    if (rst_pulse) nrst++;
    if (ic_load) nic++;
    if (ec_load) nec++;
  end

  task automatic put(logic [7:0] b);
    rx_data = b; rx_valid = 1;
    @(negedge clk);
    rx_valid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    put(8'h57); put(a); put(d[31:24]); put(d[23:16]); put(d[15:8]); put(d[7:0]);
    repeat (20) @(negedge clk);
    checks++;
    if (txq.size() != 1 || txq[0] != 8'h4B) begin failures++; $display("no ack for %h", a); end
    txq.delete();
  endtask

  task automatic rd(logic [7:0] a, logic [31:0] exp);
    put(8'h52); put(a);
    repeat (40) @(negedge clk);
    checks++;
    if (txq.size() != 4 || {txq[0], txq[1], txq[2], txq[3]} != exp) begin
      failures++; $display("read %h: %0d bytes, exp %h", a, txq.size(), exp);
    end
    txq.delete();
  endtask

  initial begin
    rx_valid = 0; rx_data = 0; tx_ready = 1;
    status = 32'h1234_5678; trig_count = 32'd77; evt_count = 32'd66;
    rej_count = 32'd55; early_count = 32'd44; frame_count = 32'd33;
    for (int u = 0; u < NU; u++) mon[u] = {6'($urandom), 32'($urandom), 32'($urandom)};
    for (int t = 0; t < NT; t++) hit_count[t] = $urandom;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    checks += 5;
    if (cfg.coinc_mask != 4'b0011) failures++;
    if (cfg.trig_delay != 8'd40) failures++;
    if (cfg.match_offset != 17'd64) failures++;
    if (cfg.match_win != 17'd400) failures++;
    if (cfg.reject_win != 17'd8192) failures++;
    rd(8'h00, 32'h4D44_4151);
    put(8'h33);                                  // junk, ignored
    wr(8'h02, 32'h0000_0005); rd(8'h02, 32'h5);
    wr(8'h03, 32'h0000_00C8); rd(8'h03, 32'hC8);
    wr(8'h04, 32'h0001_2345); rd(8'h04, 32'h1_2345);
    wr(8'h05, 32'h0000_0321); rd(8'h05, 32'h321);
    wr(8'h06, 32'h0000_4000); rd(8'h06, 32'h4000);
    checks += 5;
    if (cfg.coinc_mask != 4'h5 || cfg.trig_delay != 8'hC8) failures++;
    if (cfg.match_offset != 17'h12345) failures++;
    if (cfg.match_win != 17'h321) failures++;
    if (cfg.reject_win != 17'h4000) failures++;
    if (nbcr != 0 || nrst != 0) failures++;
    wr(8'h01, 32'h1);
    wr(8'h01, 32'h2);
    wr(8'h01, 32'h3);
    checks += 2;
    if (nbcr != 2) begin failures++; $display("bcr pulses %0d", nbcr); end
    if (nrst != 2) begin failures++; $display("rst pulses %0d", nrst); end
    wr(8'h07, 32'hCAFE_0001); wr(8'h08, 32'hBEEF_0002);
    checks += 3;
    if (nic != 1 || nec != 1) failures++;
    if (ic_word != 32'hCAFE_0001) failures++;
    if (ec_word != 32'hBEEF_0002) failures++;
    rd(8'h07, 32'hCAFE_0001);
    rd(8'h09, 32'h1234_5678);
    rd(8'h0A, 32'd77);
    rd(8'h0B, 32'd66);
    rd(8'h0C, 32'd55);
    rd(8'h0D, 32'd44);
    rd(8'h0E, 32'd33);
    for (int u = 0; u < NU; u++) begin
      rd(8'(8'h10 + 3 * u), mon[u][31:0]);
      rd(8'(8'h11 + 3 * u), mon[u][63:32]);
      rd(8'(8'h12 + 3 * u), 32'(mon[u][69:64]));
    end
    for (int t = 0; t < NT; t++) rd(8'(8'h40 + t), hit_count[t]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
