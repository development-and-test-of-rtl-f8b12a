// tb_uplink_readout: one uplink with 3 TDC slots fed by TDC stream models.
// Muon-like hits (inside the window), noise hits (before and after it) and
// triggers are generated; after the trigger latency the matchers are
// started and every matched-data FIFO must hold exactly the hits of its TDC
// that fall in [trigger - offset, trigger - offset + window), then an end
// marker. The monitor field and per-TDC hit counters are checked too.
module tb_uplink_readout;
  import minidaq_pkg::*;
  import tb_util_pkg::*;
  localparam int NS = 3;
  logic clk = 0, rst = 1;
  logic [FRAME_W-1:0] frame;
  logic frame_valid;
  tdc_time_t now_time, start_time;
  cfg_t cfg;
  logic start;
  logic [NS-1:0] busy, m_empty, m_pop, locked, code_err, rejected, overflow, early;
  match_word_t [NS-1:0] m_data;
  logic [MON_W-1:0] mon;
  logic [NS-1:0][31:0] hit_count;
  logic [NS-1:0] push;
  logic [NS-1:0][31:0] word;
  logic [NS-1:0][7:0] eb, ob;
  logic [11:0] bc;
  int checks = 0, failures = 0, nsent = 0;

  uplink_readout #(.N_SLOT(NS)) dut (.clk, .rst, .frame, .frame_valid, .now_time, .cfg, .start, .start_time,
    .busy, .m_data, .m_empty, .m_pop, .mon, .hit_count, .locked, .code_err, .rejected, .overflow, .early_drop(early));
  for (genvar k = 0; k < NS; k++) begin : g_tdc
    tdc_model #(.START_PHASE(2 * k + 1)) u_tdc (.clk, .rst, .frame_strobe(1'b1), .push(push[k]), .word(word[k]),
                                                .even_byte(eb[k]), .odd_byte(ob[k]));
  end
  always #5 clk = ~clk;

  always_comb begin
    frame = '0;
    for (int k = 0; k < NS; k++) frame[16*k +: 16] = {ob[k], eb[k]};
    frame[229:160] = 70'h2A_DEAD_BEEF_1234_5678;
  end
  assign frame_valid = !rst;
  assign now_time = {bc, 5'd0};
  always @(posedge clk) bc <= rst ? 12'd0 : bc + 1'b1;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; word = 0; start = 0; start_time = 0; m_pop = 0;
    cfg = '{coinc_mask: 4'h1, trig_delay: 8'd40, match_offset: 17'd64, match_win: 17'd400, reject_win: 17'd8192};
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (locked != '1) begin failures++; $display("not locked %b", locked); end
    for (int trig = 0; trig < 8; trig++) begin
      tdc_time_t t0;
      hit_t hits[NS][$];
      hit_t expq[NS][$];
      logic [11:0] b0;
      for (int k = 0; k < NS; k++) begin hits[k].delete(); expq[k].delete(); end
      b0 = bc;
      t0 = {b0 + 12'd2, 5'($urandom)};
      // hits per TDC, in time order: early noise, in-window, late noise
      for (int k = 0; k < NS; k++) begin
        int n;
        n = $urandom_range(0, 5);
        hits[k].push_back('{chan: 5'($urandom_range(0, 23)), le_time: t0 - 17'd200, width: 8'd1});
        for (int i = 0; i < n; i++)
          hits[k].push_back('{chan: 5'($urandom_range(0, 23)), le_time: t0 - 17'd64 + 17'(i * 70 + $urandom_range(0, 60)), width: 8'($urandom)});
        hits[k].push_back('{chan: 5'($urandom_range(0, 23)), le_time: t0 + 17'd400, width: 8'd2});
        foreach (hits[k][i]) begin
          int d;
          d = int'(hits[k][i].le_time) - int'(t0) + 64;
          if (d >= 0 && d < 400) expq[k].push_back(hits[k][i]);
        end
      end
      // send each TDC's hits (as if at their time; times are only labels here)
      for (int i = 0; i < 8; i++) begin
        @(negedge clk);
        for (int k = 0; k < NS; k++) begin
          push[k] = (i < hits[k].size());
          if (push[k]) begin
            word[k] = tdc_word(hits[k][i].chan, hits[k][i].le_time, hits[k][i].width);
            nsent++;
          end
        end
      end
      @(negedge clk); push = 0;
      repeat (40) @(negedge clk);         // trigger latency
      start_time = t0; start = 1;
      @(negedge clk); start = 0;
      repeat (3) @(negedge clk);
      while (busy != 0) @(negedge clk);
      for (int k = 0; k < NS; k++) begin
        bit done;
        done = 0;
        while (!done) begin
          checks++;
          if (m_empty[k]) begin failures++; $display("tdc %0d: FIFO empty", k); break; end
          if (m_data[k].eot) begin
            done = 1;
            if (expq[k].size() != 0) begin failures++; $display("trig %0d tdc %0d: %0d hits missing", trig, k, expq[k].size()); end
          end else if (expq[k].size() == 0 || m_data[k].hit != expq[k][0]) begin
            failures++; $display("trig %0d tdc %0d: unexpected hit %h", trig, k, m_data[k].hit);
          end else void'(expq[k].pop_front());
          m_pop[k] = 1; @(negedge clk); m_pop[k] = 0;
        end
      end
      repeat (20) @(negedge clk);
    end
    checks += 3;
    if (mon != 70'h2A_DEAD_BEEF_1234_5678) begin failures++; $display("monitor field"); end
    if (32'(hit_count[0] + hit_count[1] + hit_count[2]) != 32'(nsent)) begin failures++; $display("hit counts"); end
    if (code_err != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
