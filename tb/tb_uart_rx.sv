// tb_uart_rx: serial bytes at 8 clocks per bit (random data, random idle
// gaps) must be delivered exactly once each; a byte with a low stop bit
// must be dropped.
module tb_uart_rx;
  localparam int CPB = 8;
  logic clk = 0, rst = 1, rx = 1;
  logic [7:0] data;
  logic valid;
  logic [7:0] expq[$];
  int checks = 0, failures = 0;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst, .rx, .data, .valid);
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst && valid) begin
    checks++;
    if (expq.size() == 0 || expq[0] != data) begin failures++; $display("got %h", data); end
    if (expq.size()) void'(expq.pop_front());
  end

  task automatic send(logic [7:0] b, logic stop);
    logic [9:0] f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (CPB) @(negedge clk);
    end
    rx = 1;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (20) @(negedge clk);
    for (int n = 0; n < 100; n++) begin
      logic [7:0] b;
      b = 8'($urandom);
      if (n == 50) send(8'hA5, 1'b0);          // framing error: dropped
      expq.push_back(b);
      send(b, 1'b1);
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d bytes missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
