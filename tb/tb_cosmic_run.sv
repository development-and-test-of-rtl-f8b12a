// tb_cosmic_run: the cosmic-ray test stand workload on the full-size design.
//
// Setup modelled: one CSM uplink carries four mezzanine cards (TDC slots 0-3
// of uplink 0, 24 tubes each, 96 tubes in all); the other 36 TDC slots send
// only idle characters. A large scintillator read out by two PMTs gives the
// trigger as the coincidence of trigger inputs 0 and 1 (default mask).
// Each cosmic muon fires 6 to 8 tubes, one per layer crossed, with a drift
// time of 0-185 ns (small-radius tubes; the number is a typical value, not
// a measured one). Random noise hits are spread over all 96 tubes: one per
// muon inside the matching window and three after it, which the firmware
// must drop. The firmware runs with its reset configuration.
// Checked: every muon gives exactly one event, with the trigger time stamp,
// all muon hits and any noise hit that falls in the window, in TDC order;
// every Ethernet frame has a good CRC; every hit's time relative to its
// trigger lies inside the programmed window. The drift-time range seen is
// printed. The stimulus is random; the expected events are computed here
// from the same window rule the firmware implements.
module tb_cosmic_run;
  import minidaq_pkg::*;
  import tb_util_pkg::*;
  localparam int NU = 4, NS = 10, NT = 40, N_MEZZ = 4, N_MUON = 60;
  localparam int OFFSET = 64, WINDOW = 400;      // reset values of the firmware
  logic clk = 0, rst = 1;
  logic [NU-1:0][FRAME_W-1:0] uplink_frame;
  logic [3:0][31:0] trig_samples;
  logic uart_txd, gmii_tx_en;
  logic [7:0] gmii_txd;
  logic [1:0][31:0] dl_user;
  logic [1:0][1:0] dl_ic, dl_ec;
  logic [NT-1:0] push;
  logic [NT-1:0][31:0] word;
  logic [NT-1:0][7:0] eb, ob;
  int checks = 0, failures = 0;

  minidaq_top dut (.clk, .rst, .uplink_frame, .frame_valid(!rst), .trig_samples, .uart_rxd(1'b1), .uart_txd,
                   .gmii_txd, .gmii_tx_en, .dl_user, .dl_ic, .dl_ec);

  for (genvar t = 0; t < NT; t++) begin : g_tdc
    tdc_model #(.START_PHASE((t * 3) % 10)) u_tdc (.clk, .rst, .frame_strobe(1'b1), .push(push[t]), .word(word[t]),
                                                   .even_byte(eb[t]), .odd_byte(ob[t]));
  end
  always_comb
    for (int u = 0; u < NU; u++) begin
      uplink_frame[u] = '0;
      for (int k = 0; k < NS; k++) uplink_frame[u][16*k +: 16] = {ob[u*NS+k], eb[u*NS+k]};
    end

  always #5 clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // hits are handed to a TDC model once the bunch of their time stamp is over
  typedef struct { int tdc; logic [31:0] w; tdc_time_t t; } pend_t;
  pend_t pend[$];
  always @(negedge clk) if (!rst) begin
    logic [11:0] bcnow;
    bcnow = dut.u_ftdc.bc;
    push = '0;
    for (int i = 0; i < pend.size(); i++)
      if (!push[pend[i].tdc] && (bcnow - pend[i].t[16:5]) > 12'd0 && (bcnow - pend[i].t[16:5]) < 12'd2048) begin
        push[pend[i].tdc] = 1'b1;
        word[pend[i].tdc] = pend[i].w;
        pend.delete(i);
        i--;
      end
  end

  // ---------------- Ethernet receiver (PC side) ----------------
  typedef struct { logic [11:0] id; tdc_time_t t; logic [39:0] hits[$]; } event_t;
  event_t expev[$];
  logic [7:0] fr[$];
  logic [39:0] cur_hits[$];
  logic in_event = 0;
  logic [11:0] cur_id;
  tdc_time_t cur_t;
  int n_events = 0, n_hits = 0, dmin = 1 << 20, dmax = -1;

  task automatic check_event(logic [11:0] id, tdc_time_t t, logic [39:0] hits[$], logic [11:0] cnt);
    event_t e;
    checks++;
    if (expev.size() == 0) begin failures++; $display("unexpected event %0d", id); return; end
    e = expev.pop_front();
    checks += 3;
    if (id != e.id || t != e.t) begin failures++; $display("header id %0d t %h, exp id %0d t %h", id, t, e.id, e.t); end
    if (cnt != 12'(hits.size())) begin failures++; $display("trailer count"); end
    if (hits.size() != e.hits.size()) begin failures++; $display("event %0d: %0d hits, exp %0d", id, hits.size(), e.hits.size()); end
    else foreach (hits[i]) begin
      int d;
      d = int'(17'(hits[i][24:8] - t));       // hit time relative to the trigger, bins
      if (d >= 65536) d -= 131072;
      checks += 2;
      if (hits[i] != e.hits[i]) begin failures++; $display("event %0d hit %0d: %h exp %h", id, i, hits[i], e.hits[i]); end
      if (d < -OFFSET || d >= WINDOW - OFFSET) begin failures++; $display("hit outside window: %0d", d); end
      if (d < dmin) dmin = d;
      if (d > dmax) dmax = d;
    end
    n_hits += hits.size();
    n_events++;
  endtask

  always @(posedge clk) if (!rst) begin
    if (gmii_tx_en) fr.push_back(gmii_txd);
    else if (fr.size() != 0) begin
      logic [7:0] body[$];
      logic [31:0] fcs;
      body.delete();
      for (int i = 8; i < fr.size() - 4; i++) body.push_back(fr[i]);
      fcs = {fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]};
      checks++;
      if (fcs != crc32(body)) begin failures++; $display("bad FCS"); end
      for (int p = 14; p + 5 <= body.size(); p += 5) begin
        logic [39:0] w;
        w = {body[p], body[p+1], body[p+2], body[p+3], body[p+4]};
        case (w[39:36])
          4'hA: begin in_event = 1; cur_id = w[35:24]; cur_t = w[16:0]; cur_hits.delete(); end
          4'h1: if (in_event) cur_hits.push_back(w);
          4'hC: if (in_event) begin check_event(cur_id, cur_t, cur_hits, w[11:0]); in_event = 0; end
          default: ;
        endcase
      end
      fr.delete();
    end
  end

  // ---------------- muons and noise ----------------
  // queue a hit on a tube (0-95) at time ht; if it lies in the window of
  // the trigger at time t, it is also added to that event's expectation
  task automatic add_hit(int tube, tdc_time_t ht, tdc_time_t t, ref logic [39:0] per_tdc[NT][$]);
    int td, d;
    logic [4:0] ch;
    logic [7:0] wd;
    td = tube / 24;
    ch = 5'(tube % 24);
    wd = 8'($urandom_range(10, 120));
    // keep the pending list in time order, so that each TDC sends its hits
    // in time order as the real chip does
    begin
      int k;
      k = pend.size();
      while (k > 0 && $signed(17'(ht - pend[k-1].t)) < 0) k--;
      pend.insert(k, '{tdc: td, w: tdc_word(ch, ht, wd), t: ht});
    end
    d = int'(17'(ht - t + 17'(OFFSET)));
    if (d < WINDOW) per_tdc[td].push_back({EVT_HIT, 6'(td), ch, ht, wd});
  endtask

  initial begin
    logic [11:0] next_id;
    next_id = 0;
    trig_samples = '0; push = '0; word = '0;
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (50) @(negedge clk);
    for (int m = 0; m < N_MUON; m++) begin
      tdc_time_t t;
      logic [11:0] b;
      int sub, nlay, col;
      event_t e;
      logic [39:0] per_tdc[NT][$];
      foreach (per_tdc[i]) per_tdc[i].delete();
      // scintillator: both PMTs fire within the same sub-bin range
      sub = $urandom_range(0, 31);
      @(negedge clk);
      trig_samples[0] = 32'hFFFF_FFFF << sub;
      trig_samples[1] = 32'hFFFF_FFFF << sub;
      @(negedge clk);
      b = dut.u_ftdc.bc;
      trig_samples[0] = '1; trig_samples[1] = '1;
      repeat (2) @(negedge clk);
      trig_samples = '0;
      t = {b, 5'(sub)};
      // track: 6-8 layers of 12 tubes, nearly vertical; tube = layer*12 + col
      nlay = $urandom_range(6, 8);
      col = $urandom_range(0, 11);
      for (int l = 0; l < 8; l++) begin
        if (l >= nlay) break;
        add_hit(l * 12 + ((col + (l / 4)) % 12), t + 17'($urandom_range(0, 237)), t, per_tdc);
      end
      // noise: random tubes, one hit inside the window, three after it
      // (those wait in the buffers and are rejected as outdated or, if a
      // trigger comes first, discarded as too early)
      add_hit($urandom_range(0, 24 * N_MEZZ - 1), t + 17'($urandom_range(0, WINDOW - OFFSET - 1)), t, per_tdc);
      for (int n = 0; n < 3; n++)
        add_hit($urandom_range(0, 24 * N_MEZZ - 1), t + 17'($urandom_range(WINDOW, 5000)), t, per_tdc);
      e.id = next_id; e.t = t; e.hits = {};
      for (int td = 0; td < NT; td++) begin
        // a TDC delivers its hits in time order
        per_tdc[td].sort() with (item[24:8] - t);
        foreach (per_tdc[td][i]) e.hits.push_back(per_tdc[td][i]);
      end
      expev.push_back(e);
      next_id++;
      repeat ($urandom_range(300, 600)) @(negedge clk);
    end
    repeat (700) @(negedge clk);
    // every noise hit after a window is dropped, as outdated or as too early
    checks++;
    if (dut.rej_count + dut.early_count != 32'(3 * N_MUON)) begin
      failures++;
      $display("dropped %0d + %0d, exp %0d", dut.rej_count, dut.early_count, 3 * N_MUON);
    end
    checks += 3;
    if (n_events != N_MUON) begin failures++; $display("events %0d of %0d", n_events, N_MUON); end
    if (expev.size() != 0) begin failures++; $display("%0d events missing", expev.size()); end
    if (n_hits < 6 * N_MUON) begin failures++; $display("too few hits %0d", n_hits); end
    $display("cosmic run: %0d events, %0d hits, hit time - trigger time from %0d to %0d bins, %0d rejected, %0d too early",
             n_events, n_hits, dmin, dmax, dut.rej_count, dut.early_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
