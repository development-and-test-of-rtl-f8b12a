// tb_trig_delay: for several delay settings, triggers with random times go
// in; each must come out exactly delay+1 cycles later with its time, and no
// trigger may appear anywhere else.
module tb_trig_delay;
  import minidaq_pkg::*;
  logic clk = 0, rst = 1;
  logic iv, ov;
  tdc_time_t it, ot;
  logic [7:0] delay;
  int checks = 0, failures = 0;
  int cyc = 0;
  int exp_cyc[$];
  tdc_time_t exp_t[$];

  trig_delay dut (.clk, .rst, .in_valid(iv), .in_time(it), .delay, .out_valid(ov), .out_time(ot));
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst) begin
    if (ov) begin
      checks++;
      if (exp_cyc.size() == 0 || exp_cyc[0] != cyc || exp_t[0] != ot) begin
        failures++;
        $display("unexpected output at %0d", cyc);
      end
      if (exp_cyc.size() != 0 && exp_cyc[0] == cyc) begin void'(exp_cyc.pop_front()); void'(exp_t.pop_front()); end
    end else if (exp_cyc.size() != 0 && exp_cyc[0] == cyc) begin
      checks++; failures++;
      $display("missing output at %0d", cyc);
      void'(exp_cyc.pop_front()); void'(exp_t.pop_front());
    end
  end

  initial begin
    iv = 0; it = 0; delay = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 5; k++) begin
      delay = (k == 0) ? 8'd0 : (k == 4) ? 8'd255 : 8'($urandom_range(1, 200));
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        iv = ($urandom_range(0, 9) == 0);
        it = 17'($urandom);
        if (iv) begin exp_cyc.push_back(cyc + 1 + int'(delay)); exp_t.push_back(it); end
      end
      @(negedge clk); iv = 0;
      repeat (270) @(negedge clk);
    end
    checks++;
    if (exp_cyc.size() != 0) begin failures++; $display("pending"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
