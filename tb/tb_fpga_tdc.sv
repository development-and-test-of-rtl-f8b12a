// tb_fpga_tdc: pulses of random start sub-bin and length; checks that a
// trigger is produced only at a rising edge, in the bunch where it occurs,
// with time {bunch count, sub-bin}; that an edge at sub-bin 0 right after a
// high last sample of the previous bunch is not a new edge; and that the
// bunch count reset clears the counter.
module tb_fpga_tdc;
  import minidaq_pkg::*;
  logic clk = 0, rst = 1;
  logic [31:0] coinc;
  logic bcr, tv;
  tdc_time_t tt;
  logic [11:0] bc;
  int checks = 0, failures = 0;
  logic [11:0] bc_model;

  fpga_tdc dut (.clk, .rst, .coinc, .bcr, .trig_valid(tv), .trig_time(tt), .bc);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one bunch: drive samples, check the result one cycle later
  task automatic bunch(logic [31:0] s, logic exp_v, int exp_sub);
    logic [11:0] b;
    b = bc;
    coinc = s;
    @(negedge clk);
    checks++;
    if (tv != exp_v) begin failures++; $display("valid %b exp %b for %h", tv, exp_v, s); end
    if (exp_v) begin
      checks++;
      if (tt != {b, 5'(exp_sub)}) begin failures++; $display("time %h exp %h", tt, {b, 5'(exp_sub)}); end
    end
  endtask

  initial begin
    coinc = 0; bcr = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    for (int n = 0; n < 200; n++) begin
      int st;
      st = $urandom_range(0, 31);
      bunch(32'hFFFF_FFFF << st, 1, st);           // edge at st, high to the end
      bunch(32'hFFFF_FFFF, 0, 0);                 // stays high across the boundary
      bunch(32'h0000_00FF, 0, 0);                 // still high at bit 0, falls later
      bunch(32'h0, 0, 0);
    end
    // bunch count reset
    @(negedge clk);
    bcr = 1; @(negedge clk); bcr = 0;
    @(negedge clk);
    checks++;
    if (bc != 12'd1) begin failures++; $display("bc after reset %0d", bc); end
    bunch(32'h0000_0100, 1, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
