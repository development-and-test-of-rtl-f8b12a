// tb_trigger_dispatch: queued triggers must start only when no matcher is
// busy and the event queue has room, each start pops one trigger, passes its
// time, and event numbers count up by one.
module tb_trigger_dispatch;
  import minidaq_pkg::*;
  logic clk = 0, rst = 1;
  logic tv, pop, start, evt_wr, evt_full;
  tdc_time_t tt, st;
  logic [3:0] busy;
  logic [11:0] id;
  tdc_time_t tq[$];
  int checks = 0, failures = 0, nstart = 0, busy_cnt = 0;

  trigger_dispatch #(.N_TDC(4)) dut (.clk, .rst, .trig_valid(tv), .trig_time(tt), .trig_pop(pop), .busy,
                                     .start, .start_time(st), .evt_wr, .evt_id(id), .evt_full);
  always #5 clk = ~clk;
  assign tv = tq.size() > 0;
  assign tt = tv ? tq[0] : '0;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // handshake values as the design saw them at the clock edge
  logic fire_s, blocked_s, popok_s;
  tdc_time_t st_s, head_s;
  logic [11:0] id_s;
  always @(posedge clk) begin
    fire_s    <= start;
    blocked_s <= (busy != 0) || evt_full;
    popok_s   <= pop && evt_wr;
    st_s      <= st;
    head_s    <= tt;
    id_s      <= id;
  end

  // matcher model: busy for a random time after start
  always @(negedge clk) if (!rst) begin
    if (fire_s) begin
      checks += 4;
      if (blocked_s) begin failures++; $display("start while blocked"); end
      if (!popok_s) begin failures++; $display("pop/evt_wr missing"); end
      if (st_s != head_s) begin failures++; $display("time"); end
      if (id_s != 12'(nstart)) begin failures++; $display("id %0d exp %0d", id_s, nstart); end
      void'(tq.pop_front());
      nstart++;
      busy_cnt = $urandom_range(0, 12);
    end
    if (busy_cnt > 0) begin busy[$urandom_range(0, 3)] = 1; busy_cnt--; end
    else busy = '0;
    evt_full = ($urandom_range(0, 7) == 0);
  end

  initial begin
    busy = 0; evt_full = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 100; n++) tq.push_back(17'($urandom));
    repeat (3000) @(negedge clk);
    checks++;
    if (nstart != 100) begin failures++; $display("started %0d of 100", nstart); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
