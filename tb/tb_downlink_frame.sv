// tb_downlink_frame: ENC commands must appear in user[7:0] for exactly one
// frame after their pulse (system reset over bunch count reset when both),
// and configuration words must leave the IC and EC fields 2 bits per frame,
// most significant first, framed by the idle value 2'b11.
module tb_downlink_frame;
  logic clk = 0, rst = 1;
  logic bcr, sysrst, ic_load, ec_load, busy;
  logic [31:0] ic_word, ec_word, user;
  logic [1:0] ic, ec;
  int checks = 0, failures = 0;

  downlink_frame dut (.clk, .rst, .bcr, .sysrst, .ic_word, .ic_load, .ec_word, .ec_load, .user, .ic, .ec, .busy);
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmd(logic b, logic s, logic [7:0] exp);
    bcr = b; sysrst = s;
    @(negedge clk);
    bcr = 0; sysrst = 0;
    checks++;
    if (user != {24'h0, exp}) begin failures++; $display("enc %h exp %h", user, exp); end
    @(negedge clk);
    checks++;
    if (user != 32'h0) begin failures++; $display("enc not idle"); end
  endtask

  initial begin
    bcr = 0; sysrst = 0; ic_load = 0; ec_load = 0; ic_word = 0; ec_word = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    checks += 3;
    if (user != 0 || ic != 2'b11 || ec != 2'b11) begin failures++; $display("idle"); end
    cmd(1, 0, 8'hB4);
    cmd(0, 1, 8'hE1);
    cmd(1, 1, 8'hE1);
    for (int n = 0; n < 10; n++) begin
      logic [31:0] wi, we, gi, ge;
      wi = $urandom; we = $urandom;
      ic_word = wi; ec_word = we; ic_load = 1; ec_load = (n % 2 == 0);
      @(negedge clk);
      ic_load = 0; ec_load = 0;
      checks++;
      if (!busy) begin failures++; $display("busy"); end
      for (int i = 0; i < 16; i++) begin
        @(negedge clk);
        gi = {gi[29:0], ic};
        ge = {ge[29:0], ec};
      end
      checks++;
      if (gi != wi) begin failures++; $display("ic %h exp %h", gi, wi); end
      if (n % 2 == 0) begin
        checks++;
        if (ge != we) begin failures++; $display("ec %h exp %h", ge, we); end
      end
      @(negedge clk);
      checks += 3;
      if (ic != 2'b11 || ec != 2'b11) begin failures++; $display("not idle after word"); end
      if (busy) begin failures++; $display("still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
