// tb_event_builder: fills per-TDC matched FIFO models with random hits and
// end markers for several events (hits may arrive late, the output may
// stall) and checks the exact word sequence: header, hits of TDC 0..N-1 in
// order with their TDC number, trailer with the right count.
module tb_event_builder;
  import minidaq_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst = 1;
  logic ev_valid, ev_pop, out_valid, out_last, out_ready;
  logic [11:0] ev_id;
  tdc_time_t ev_time;
  match_word_t [N-1:0] m_data;
  logic [N-1:0] m_empty, m_pop;
  logic [39:0] out_word;
  match_word_t mq[N][$];
  logic [39:0] expw[$];
  logic [11:0] idq[$];
  tdc_time_t tq[$];
  int checks = 0, failures = 0, nlast = 0;

  event_builder #(.N_TDC(N)) dut (.clk, .rst, .evt_valid(ev_valid), .evt_id(ev_id), .evt_time(ev_time), .evt_pop(ev_pop),
                                  .m_data, .m_empty, .m_pop, .out_word, .out_valid, .out_last, .out_ready);
  always #5 clk = ~clk;

  always_comb begin
    ev_valid = idq.size() > 0;
    ev_id    = ev_valid ? idq[0] : '0;
    ev_time  = ev_valid ? tq[0] : '0;
    for (int i = 0; i < N; i++) begin
      m_empty[i] = mq[i].size() == 0;
      m_data[i]  = m_empty[i] ? '0 : mq[i][0];
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic take_s, last_s, evpop_s;
  logic [39:0] word_s;
  logic [N-1:0] mpop_s;
  always @(posedge clk) begin
    take_s  <= out_valid && out_ready;
    last_s  <= out_last;
    word_s  <= out_word;
    mpop_s  <= m_pop;
    evpop_s <= ev_pop;
  end

  always @(negedge clk) if (!rst) begin
    if (take_s) begin
      checks++;
      if (expw.size() == 0 || word_s != expw[0]) begin
        failures++; $display("word %h exp %h", word_s, expw.size() ? expw[0] : 40'h0);
      end
      if (expw.size()) void'(expw.pop_front());
      if (last_s) nlast++;
    end
    for (int i = 0; i < N; i++) if (mpop_s[i]) void'(mq[i].pop_front());
    if (evpop_s) begin void'(idq.pop_front()); void'(tq.pop_front()); end
    out_ready = ($urandom_range(0, 4) != 0);
  end

  initial begin
    out_ready = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int e = 0; e < 20; e++) begin
      int nh;
      logic [11:0] id;
      tdc_time_t t;
      nh = 0;
      id = 12'(e * 3 + 1);
      t  = 17'($urandom);
      expw.push_back({4'hA, id, 7'b0, t});
      idq.push_back(id); tq.push_back(t);
      for (int i = 0; i < N; i++) begin
        int k;
        k = $urandom_range(0, 4);
        repeat (k) begin
          match_word_t w;
          w.eot = 0; w.hit = 30'($urandom);
          mq[i].push_back(w);
          expw.push_back({4'h1, 6'(i), w.hit.chan, w.hit.le_time, w.hit.width});
          nh++;
        end
        if (i == N - 1 && e % 4 == 0) repeat (20) @(negedge clk);   // a slow TDC
        mq[i].push_back('{eot: 1'b1, hit: '0});
      end
      expw.push_back({4'hC, id, 12'b0, 12'(nh)});
    end
    repeat (2000) @(negedge clk);
    checks += 2;
    if (expw.size() != 0) begin failures++; $display("%0d words missing", expw.size()); end
    if (nlast != 20) begin failures++; $display("trailers %0d", nlast); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
