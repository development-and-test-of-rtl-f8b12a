// tb_trigger_matcher: a hit queue model in front of the matcher. For each
// trigger, checks that exactly the hits with 0 <= t - trig + offset < win are
// forwarded, older ones discarded, later ones left in place, that an end
// marker closes each trigger, and that a stalled output (out_ready low)
// loses nothing. Also checks a window that wraps around the time counter.
module tb_trigger_matcher;
  import minidaq_pkg::*;
  logic clk = 0, rst = 1;
  logic start, pop, busy, out_valid, out_ready, early;
  tdc_time_t trig_time, match_offset, match_win;
  hit_t head;
  logic head_valid;
  match_word_t out_data;
  hit_t q[$];
  match_word_t got[$];
  int checks = 0, failures = 0;

  trigger_matcher dut (.clk, .rst, .start, .trig_time, .match_offset, .match_win, .head, .head_valid, .pop,
                       .busy, .out_data, .out_valid, .out_ready, .early_drop(early));
  always #5 clk = ~clk;

  assign head_valid = q.size() > 0;
  assign head       = head_valid ? q[0] : '0;
  always @(posedge clk) begin
    if (pop && q.size() > 0) void'(q.pop_front());
    if (out_valid && out_ready) got.push_back(out_data);
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_trigger(tdc_time_t t0, int nh);
    hit_t exp[$];
    hit_t rest[$];
    int d;
    q.delete(); got.delete();
    // hits spread from t0-300 to t0+700, in time order
    for (int i = 0; i < nh; i++) begin
      hit_t h;
      h.chan = 5'(i); h.width = 8'($urandom);
      h.le_time = t0 - 17'd300 + 17'(i * 1000 / nh);
      q.push_back(h);
    end
    // expected: in-order scan, stop at first late hit
    foreach (q[i]) begin
      d = int'(signed'(17'(q[i].le_time - t0 + match_offset)));
      if (d >= int'(match_win)) begin
        for (int j = i; j < q.size(); j++) rest.push_back(q[j]);
        break;
      end
      if (d >= 0) exp.push_back(q[i]);
    end
    @(posedge clk);
    trig_time <= t0; start <= 1;
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    @(posedge clk);
    checks++;
    if (got.size() != exp.size() + 1) begin failures++; $display("count %0d vs %0d", got.size(), exp.size() + 1); end
    else begin
      foreach (exp[i]) begin
        checks++;
        if (got[i].eot || got[i].hit != exp[i]) begin failures++; $display("hit %0d", i); end
      end
      checks++;
      if (!got[exp.size()].eot) begin failures++; $display("no end marker"); end
    end
    checks++;
    if (q.size() != rest.size()) begin failures++; $display("left %0d vs %0d", q.size(), rest.size()); end
  endtask

  initial begin
    start = 0; trig_time = 0; match_offset = 17'd100; match_win = 17'd400; out_ready = 1;
    repeat (3) @(posedge clk);
    rst <= 0;
    run_trigger(17'd5000, 40);
    run_trigger(17'd20000, 7);
    match_offset = 17'd0; match_win = 17'd50;
    run_trigger(17'd30000, 100);
    match_offset = 17'd200; match_win = 17'd600;
    run_trigger(17'd100, 60);             // window wraps below zero
    // empty buffer: only the marker
    q.delete(); got.delete();
    @(posedge clk); start <= 1; trig_time <= 17'd7; @(posedge clk); start <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (got.size() != 1 || !got[0].eot) begin failures++; $display("empty trigger"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
