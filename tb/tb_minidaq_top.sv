// tb_minidaq_top: end-to-end run of the whole firmware at its default size
// (4 uplinks x 10 TDCs, 115200-baud UART at 40 MHz).
//
// 40 TDC stream models feed the four uplink frames. Scintillator pulses
// drive the trigger inputs; for each trigger, muon hits (inside the
// matching window), early noise (before it) and late noise (after it) are
// sent on random TDCs after their time stamps have passed. The PC side is
// modelled too: commands go in over the UART and every Ethernet frame on
// the GMII port is checked (CRC) and parsed back into events, which must
// equal the events predicted here: header with event number and measured
// trigger time, the in-window hits in TDC order, trailer with the count.
//
// Mechanisms made to happen and counted: two-input coincidence trigger,
// single-input pulse vetoed by the coincidence, mask switch to one input
// over the UART, matched hits, early hits discarded by the matcher, outdated
// hits dropped by the rejection counter, Ethernet back-pressure on the event
// builder, bunch count reset (ENC code on the downlink), EC configuration
// word on the downlink, monitor-field and counter read-back. A mechanism
// that never happened counts as a failure.
module tb_minidaq_top;
  import minidaq_pkg::*;
  import tb_util_pkg::*;
  localparam int NU = 4, NS = 10, NT = 40, CPB = 347;
  logic clk = 0, rst = 1;
  logic [NU-1:0][FRAME_W-1:0] uplink_frame;
  logic [3:0][31:0] trig_samples;
  logic uart_rxd, uart_txd, gmii_tx_en;
  logic [7:0] gmii_txd;
  logic [1:0][31:0] dl_user;
  logic [1:0][1:0] dl_ic, dl_ec;
  logic [NT-1:0] push;
  logic [NT-1:0][31:0] word;
  logic [NT-1:0][7:0] eb, ob;
  int checks = 0, failures = 0;

  minidaq_top dut (.clk, .rst, .uplink_frame, .frame_valid(!rst), .trig_samples, .uart_rxd, .uart_txd,
                   .gmii_txd, .gmii_tx_en, .dl_user, .dl_ic, .dl_ec);

  for (genvar t = 0; t < NT; t++) begin : g_tdc
    tdc_model #(.START_PHASE((t * 7) % 10)) u_tdc (.clk, .rst, .frame_strobe(1'b1), .push(push[t]), .word(word[t]),
                                                   .even_byte(eb[t]), .odd_byte(ob[t]));
  end
  function automatic logic [69:0] mon_pattern(int u);
    return {6'(u + 1), 32'hA5A5_0000 + 32'(u), 32'h0F0F_0000 + 32'(u)};
  endfunction
  always_comb
    for (int u = 0; u < NU; u++) begin
      uplink_frame[u] = '0;
      for (int k = 0; k < NS; k++) uplink_frame[u][16*k +: 16] = {ob[u*NS+k], eb[u*NS+k]};
      uplink_frame[u][229:160] = mon_pattern(u);
    end

  always #5 clk = ~clk;

  initial begin
    #200_000_000;                       // 20 M cycles
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_coinc = 0, n_veto = 0, n_single = 0, n_matched = 0, n_stall = 0, n_bcr = 0, n_ec = 0, n_readback = 0;
  always @(posedge clk) if (!rst && dut.ev_valid && !dut.ev_ready) n_stall++;

  // ---------------- hit scheduler: send a hit once its time has passed ------
  typedef struct { int tdc; logic [31:0] w; tdc_time_t t; } pend_t;
  pend_t pend[$];
  int nsent[NT];
  always @(negedge clk) if (!rst) begin
    logic [11:0] bcnow;
    bcnow = dut.u_ftdc.bc;
    push = '0;
    for (int i = 0; i < pend.size(); i++) begin
      if (!push[pend[i].tdc] && (bcnow - pend[i].t[16:5]) > 12'd0 && (bcnow - pend[i].t[16:5]) < 12'd2048) begin
        push[pend[i].tdc] = 1'b1;
        word[pend[i].tdc] = pend[i].w;
        nsent[pend[i].tdc]++;
        pend.delete(i);
        i--;
      end
    end
  end

  // ---------------- UART: PC side ----------------
  logic [7:0] rxq[$];
  task automatic uart_put(logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rxd = f[i];
      repeat (CPB) @(negedge clk);
    end
  endtask
  initial forever begin
    logic [7:0] b;
    @(negedge uart_txd);
    repeat (CPB + CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      b[i] = uart_txd;
      repeat (CPB) @(posedge clk);
    end
    rxq.push_back(b);
  end
  task automatic reg_write(logic [7:0] a, logic [31:0] d);
    rxq.delete();
    uart_put(8'h57); uart_put(a);
    for (int i = 3; i >= 0; i--) uart_put(d[8*i +: 8]);
    repeat (12 * CPB) @(negedge clk);
    checks++;
    if (rxq.size() != 1 || rxq[0] != 8'h4B) begin failures++; $display("no ack for write %h", a); end
  endtask
  task automatic reg_read(logic [7:0] a, output logic [31:0] d);
    rxq.delete();
    uart_put(8'h52); uart_put(a);
    repeat (42 * CPB) @(negedge clk);
    checks++;
    if (rxq.size() != 4) begin failures++; $display("read %h: %0d bytes", a, rxq.size()); d = '0; end
    else d = {rxq[0], rxq[1], rxq[2], rxq[3]};
  endtask

  // ---------------- Ethernet: PC side ----------------
  typedef struct { logic [11:0] id; tdc_time_t t; logic [39:0] hits[$]; } event_t;
  event_t expev[$];
  logic [7:0] fr[$];
  logic [39:0] cur_hits[$];
  logic in_event = 0;
  logic [11:0] cur_id;
  tdc_time_t cur_t;
  int n_frames = 0, n_events = 0;

  task automatic check_event(logic [11:0] id, tdc_time_t t, logic [39:0] hits[$], logic [11:0] cnt);
    event_t e;
    checks++;
    if (expev.size() == 0) begin failures++; $display("unexpected event %0d", id); return; end
    e = expev.pop_front();
    checks += 3;
    if (id != e.id || t != e.t) begin failures++; $display("event header id %0d t %h, exp id %0d t %h", id, t, e.id, e.t); end
    if (cnt != 12'(hits.size())) begin failures++; $display("trailer count"); end
    if (hits.size() != e.hits.size()) begin failures++; $display("event %0d: %0d hits, exp %0d", id, hits.size(), e.hits.size()); end
    else foreach (hits[i]) begin
      checks++;
      if (hits[i] != e.hits[i]) begin failures++; $display("event %0d hit %0d: %h exp %h", id, i, hits[i], e.hits[i]); end
    end
    n_matched += hits.size();
    n_events++;
  endtask

  always @(posedge clk) if (!rst) begin
    if (gmii_tx_en) fr.push_back(gmii_txd);
    else if (fr.size() != 0) begin
      logic [7:0] body[$];
      logic [31:0] fcs;
      body.delete();
      n_frames++;
      for (int i = 8; i < fr.size() - 4; i++) body.push_back(fr[i]);
      fcs = {fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]};
      checks++;
      if (fcs != crc32(body)) begin failures++; $display("bad FCS"); end
      checks++;
      if ({body[12], body[13]} != 16'h88B5) begin failures++; $display("ethertype"); end
      for (int p = 14; p + 5 <= body.size(); p += 5) begin
        logic [39:0] w;
        w = {body[p], body[p+1], body[p+2], body[p+3], body[p+4]};
        case (w[39:36])
          4'hA: begin in_event = 1; cur_id = w[35:24]; cur_t = w[16:0]; cur_hits.delete(); end
          4'h1: if (in_event) cur_hits.push_back(w);
          4'hC: if (in_event) begin
            if (w[35:24] != cur_id) begin failures++; $display("trailer id"); end
            check_event(cur_id, cur_t, cur_hits, w[11:0]);
            in_event = 0;
          end
          default: ;
        endcase
      end
      fr.delete();
    end
  end

  // ---------------- downlink observation ----------------
  logic [31:0] ec_got;
  int ec_n = -1;
  always @(posedge clk) if (!rst) begin
    if (dl_user[0][7:0] == ENC_BCR && dl_user[1][7:0] == ENC_BCR) n_bcr++;
    // the EC field starts one frame after the load: skip one, take 16
    if (ec_n >= 1 && ec_n <= 16) begin ec_got = {ec_got[29:0], dl_ec[0]}; ec_n++; end
    else if (ec_n == 0) ec_n = 1;
    if (dut.u_dl.ec_load) ec_n = 0;
  end

  // ---------------- scintillator pulses and hits ----------------
  logic [11:0] next_id = 0;
  int n_expect_early = 0, n_expect_rej = 0;

  // drive a pulse on the selected inputs; returns the trigger time the
  // firmware must measure (bunch counter after the sampling register)
  task automatic pulse(logic [3:0] which, int sub, output tdc_time_t t);
    logic [11:0] b;
    @(negedge clk);
    for (int i = 0; i < 4; i++) trig_samples[i] = which[i] ? (32'hFFFF_FFFF << sub) : 32'h0;
    @(negedge clk);
    b = dut.u_ftdc.bc;                       // bunch count seen by the TDC stage
    for (int i = 0; i < 4; i++) trig_samples[i] = which[i] ? 32'hFFFF_FFFF : 32'h0;
    repeat (3) @(negedge clk);
    trig_samples = '0;
    t = {b, 5'(sub)};
  endtask

  // one scintillator event: hits around time t; if accepted, the expected
  // event is queued
  task automatic muon(logic [3:0] which, logic accepted);
    tdc_time_t t;
    event_t e;
    logic [39:0] per_tdc[NT][$];
    pulse(which, $urandom_range(0, 31), t);
    for (int n = 0; n < 6; n++) begin
      int td, nh;
      td = $urandom_range(0, NT - 1);
      if (per_tdc[td].size() != 0) continue;
      // early noise, 1-2 in-window hits, late noise
      pend.push_back('{tdc: td, w: tdc_word(5'(n), t - 17'd300, 8'd9), t: t - 17'd300});
      if (accepted) n_expect_early++; else n_expect_rej++;
      nh = $urandom_range(1, 2);
      for (int i = 0; i < nh; i++) begin
        tdc_time_t ht;
        logic [4:0] ch;
        logic [7:0] wd;
        ht = t - 17'd40 + 17'(i * 150 + $urandom_range(0, 120));
        ch = 5'($urandom_range(0, 23));
        wd = 8'($urandom);
        pend.push_back('{tdc: td, w: tdc_word(ch, ht, wd), t: ht});
        if (accepted) per_tdc[td].push_back({EVT_HIT, 6'(td), ch, ht, wd});
        else n_expect_rej++;
      end
      pend.push_back('{tdc: td, w: tdc_word(5'(n), t + 17'd600, 8'd3), t: t + 17'd600});
      n_expect_rej++;
    end
    if (accepted) begin
      e.id = next_id; e.t = t;
      for (int td = 0; td < NT; td++) foreach (per_tdc[td][i]) e.hits.push_back(per_tdc[td][i]);
      expev.push_back(e);
      next_id++;
    end
    repeat (400) @(negedge clk);             // > rejection window (256 bunches)
  endtask

  initial begin
    logic [31:0] d;
    trig_samples = '0; uart_rxd = 1; push = '0; word = '0;
    foreach (nsent[i]) nsent[i] = 0;
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (dut.locked != '1) begin failures++; $display("not all TDC links locked"); end
    // default coincidence mask 0011: two-input coincidence
    for (int n = 0; n < 6; n++) begin muon(4'b0011, 1); n_coinc++; end
    // single input: vetoed
    for (int n = 0; n < 2; n++) begin muon(4'b0001, 0); n_veto++; end
    // switch to single-input trigger
    reg_write(8'h02, 32'h1);
    for (int n = 0; n < 3; n++) begin muon(4'b0001, 1); n_single++; end
    // a burst of close triggers to back up the Ethernet output
    for (int n = 0; n < 4; n++) begin
      tdc_time_t t;
      event_t e;
      pulse(4'b0001, n * 5, t);
      e.id = next_id; e.t = t; e.hits = {};
      expev.push_back(e); next_id++;
      repeat (20) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    // bunch count reset through the ENC command
    reg_write(8'h01, 32'h1);
    checks++;
    if (dut.u_ftdc.bc > 12'd3000) begin failures++; $display("bc not reset"); end
    muon(4'b0001, 1);
    // configuration word to the GBT-SCA channel
    reg_write(8'h08, 32'hC0FF_EE42);
    checks++;
    if (ec_got != 32'hC0FF_EE42) begin failures++; $display("EC word %h", ec_got); end
    else n_ec++;
    // read-back
    reg_read(8'h00, d); checks++; if (d != 32'h4D44_4151) begin failures++; $display("id %h", d); end
    reg_read(8'h10 + 8'd3, d); checks++; if (d != mon_pattern(1)[31:0]) begin failures++; $display("monitor %h", d); end
    reg_read(8'h40 + 8'd5, d); checks++; if (d != 32'(nsent[5])) begin failures++; $display("hit counter %0d vs %0d", d, nsent[5]); end
    reg_read(8'h0C, d); checks++; if (d != 32'(n_expect_rej)) begin failures++; $display("rejected %0d exp %0d", d, n_expect_rej); end
    reg_read(8'h0D, d); checks++; if (d != 32'(n_expect_early)) begin failures++; $display("early %0d exp %0d", d, n_expect_early); end
    reg_read(8'h0E, d); checks++; if (d != 32'(n_frames)) begin failures++; $display("frames %0d vs %0d", d, n_frames); end
    n_readback = 6;
    checks += 2;
    if (expev.size() != 0) begin failures++; $display("%0d events never arrived", expev.size()); end
    if (n_events != int'(next_id)) begin failures++; $display("events %0d", n_events); end
    $display("mechanisms: coincidence=%0d veto=%0d single=%0d matched_hits=%0d early=%0d rejected=%0d stall_cycles=%0d bcr=%0d ec=%0d readback=%0d frames=%0d",
             n_coinc, n_veto, n_single, n_matched, n_expect_early, n_expect_rej, n_stall, n_bcr, n_ec, n_readback, n_frames);
    checks += 10;
    if (n_coinc == 0)  failures++;
    if (n_veto == 0)   failures++;
    if (n_single == 0) failures++;
    if (n_matched == 0) failures++;
    if (n_expect_early == 0) failures++;
    if (n_expect_rej == 0) failures++;
    if (n_stall == 0)  begin failures++; $display("no Ethernet back-pressure seen"); end
    if (n_bcr != 1)    begin failures++; $display("bcr frames %0d", n_bcr); end
    if (n_ec == 0)     failures++;
    if (n_frames == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
