// tb_uart_tx: bytes handed over with valid/ready are sampled from the line
// in the middle of each bit; checks start bit, data (LSB first), stop bit,
// the frame length of 10 bit times and that ready is low during the frame.
module tb_uart_tx;
  localparam int CPB = 8;
  logic clk = 0, rst = 1;
  logic [7:0] data;
  logic valid, ready, tx;
  int checks = 0, failures = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst, .data, .valid, .ready, .tx);
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; data = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    for (int n = 0; n < 60; n++) begin
      logic [7:0] b, r;
      int busy_cycles;
      b = 8'($urandom);
      checks++;
      if (!ready || !tx) begin failures++; $display("not idle"); end
      data = b; valid = 1;
      @(negedge clk);
      valid = 0;
      // now at half a cycle into the start bit; move to mid-bit
      repeat (CPB / 2 - 1) @(negedge clk);
      checks++;
      if (tx !== 1'b0) begin failures++; $display("start bit"); end
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(negedge clk);
        r[i] = tx;
      end
      repeat (CPB) @(negedge clk);
      checks += 2;
      if (tx !== 1'b1) begin failures++; $display("stop bit"); end
      if (r != b) begin failures++; $display("data %h exp %h", r, b); end
      busy_cycles = 0;
      while (!ready) begin @(negedge clk); busy_cycles++; end
      checks++;
      // ready returns 10 bit times after the accepting edge
      if (busy_cycles != CPB / 2 + 1) begin failures++; $display("frame length off by %0d", busy_cycles - CPB / 2 - 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
