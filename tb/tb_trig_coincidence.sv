// tb_trig_coincidence: random sampled inputs and masks; the output one
// cycle later must be the AND of the enabled inputs (all zero for an empty
// mask), checked against a bit-by-bit reference.
module tb_trig_coincidence;
  logic clk = 0, rst = 1;
  logic [3:0][31:0] samples;
  logic [3:0] mask;
  logic [31:0] coinc, expv;
  int checks = 0, failures = 0;

  trig_coincidence dut (.clk, .rst, .samples, .mask, .coinc);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    samples = '0; mask = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < 4; i++) samples[i] = $urandom | $urandom;   // mostly ones
      mask = 4'(n % 16);
      for (int b = 0; b < 32; b++) begin
        expv[b] = (mask != 0);
        for (int i = 0; i < 4; i++) if (mask[i] && !samples[i][b]) expv[b] = 0;
      end
      @(negedge clk);
      checks++;
      if (coinc != expv) begin failures++; $display("mask %b got %h exp %h", mask, coinc, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
