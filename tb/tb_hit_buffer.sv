// tb_hit_buffer: writes hits with known times, advances the time counter and
// checks that (a) hits come out in order while hold is high, (b) with hold
// low, a hit is dropped exactly when its age exceeds the rejection window
// and not before, and (c) a full buffer drops new hits and flags overflow.
module tb_hit_buffer;
  import minidaq_pkg::*;
  logic clk = 0, rst = 1;
  hit_t wr_hit, head;
  logic wr_en, hold, head_valid, pop, rejected, overflow;
  tdc_time_t now_time, reject_win;
  logic [4:0] level;
  int checks = 0, failures = 0, nrej = 0, novf = 0;

  hit_buffer #(.DEPTH(16)) dut (.clk, .rst, .wr_hit, .wr_en, .now_time, .reject_win, .hold, .head, .head_valid,
                                .pop, .rejected, .overflow, .level);
  always #5 clk = ~clk;
  always @(posedge clk) if (!rst) begin
    if (rejected) nrej++;
    if (overflow) novf++;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(tdc_time_t t, logic [4:0] ch);
    @(negedge clk);
    wr_hit = '{chan: ch, le_time: t, width: 8'd7};
    wr_en = 1;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    wr_en = 0; hold = 1; pop = 0; now_time = 17'd1000; reject_win = 17'd500; wr_hit = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // (a) ordering with hold
    for (int i = 0; i < 5; i++) write(17'(900 + i), 5'(i));
    for (int i = 0; i < 5; i++) begin
      #1;
      checks += 2;
      if (!head_valid || head.chan != 5'(i) || head.le_time != 17'(900 + i)) begin failures++; $display("order %0d hv=%b ch=%0d t=%0d lvl=%0d", i, head_valid, head.chan, head.le_time, level); end
      if (level != 5'(5 - i)) begin failures++; $display("level"); end
      @(negedge clk); pop = 1; @(negedge clk); pop = 0;
    end
    // (b) rejection: hits at 2000 and 2100, window 500
    write(17'd2000, 5'd1);
    write(17'd2100, 5'd2);
    hold <= 0;
    now_time <= 17'd2500;                  // age 500: keep
    repeat (3) @(posedge clk); #1;
    checks++;
    if (level != 2 || nrej != 0) begin failures++; $display("dropped too early lvl=%0d nrej=%0d", level, nrej); end
    now_time <= 17'd2501;                  // age 501: drop first only
    repeat (3) @(posedge clk); #1;
    checks += 2;
    if (level != 1 || nrej != 1) begin failures++; $display("first not dropped level=%0d", level); end
    if (head.le_time != 17'd2100) begin failures++; $display("wrong hit dropped"); end
    // wrap-around: now small, hit near the top of the range
    hold <= 1;
    @(posedge clk);
    @(negedge clk); pop = 1; @(negedge clk); pop = 0;
    write(17'h1FF00, 5'd3);
    now_time <= 17'h00010;                 // age 0x110 = 272 < 500: keep
    hold <= 0;
    repeat (3) @(posedge clk); #1;
    checks++;
    if (level != 1) begin failures++; $display("wrap-around hit dropped"); end
    now_time <= 17'h00100;                 // age 512 > 500: drop
    repeat (3) @(posedge clk); #1;
    checks++;
    if (level != 0) begin failures++; $display("wrap-around hit kept"); end
    // (c) overflow
    hold <= 1;
    for (int i = 0; i < 18; i++) write(17'h00100, 5'(i));
    repeat (2) @(posedge clk); #1;
    checks += 2;
    if (level != 16) begin failures++; $display("level at full %0d", level); end
    if (novf != 2) begin failures++; $display("overflow count %0d", novf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
