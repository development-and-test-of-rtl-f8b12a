// tb_uplink_demux: checks that every TDC slot and the monitor field are cut
// from the right bits of random 230-bit frames, one cycle after frame_valid.
module tb_uplink_demux;
  import minidaq_pkg::*;
  logic clk = 0, rst = 1;
  logic [FRAME_W-1:0] frame;
  logic frame_valid;
  logic [9:0][7:0] se, so;
  logic [MON_W-1:0] mon;
  logic sv;
  int checks = 0, failures = 0;

  uplink_demux dut (.clk, .rst, .frame, .frame_valid, .slot_even(se), .slot_odd(so), .mon, .slot_valid(sv));
  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame = '0; frame_valid = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 50; n++) begin
      logic [FRAME_W-1:0] f;
      for (int w = 0; w < 8; w++) f[32*w +: 32] = $urandom;
      frame <= f; frame_valid <= 1;
      @(posedge clk);
      frame_valid <= 0;
      #1;
      checks++;
      if (!sv) failures++;
      for (int k = 0; k < 10; k++) begin
        checks += 2;
        if (se[k] != f[16*k +: 8])   begin failures++; $display("even slot %0d", k); end
        if (so[k] != f[16*k+8 +: 8]) begin failures++; $display("odd slot %0d", k); end
      end
      checks++;
      if (mon != f[229:160]) begin failures++; $display("monitor"); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
