// tb_tdc_decode: drives an 8b/10b TDC stream (random start phase, idles,
// random hits, back-to-back words) through the even/odd e-link split and
// checks every decoded hit against the sent one. A corrupted character is
// then injected: code_err must pulse, the decoder must re-lock on the next
// comma and later hits must again be exact.
module tb_tdc_decode;
  import minidaq_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst = 1;
  logic [7:0] eb, ob;
  logic iv;
  hit_t hit;
  logic hv, locked, cerr;
  logic [31:0] hcount;
  int checks = 0, failures = 0, nerr = 0;
  logic bits[$];
  hit_t expq[$];
  logic rd = 0;

  tdc_decode dut (.clk, .rst, .even_byte(eb), .odd_byte(ob), .in_valid(iv), .hit, .hit_valid(hv),
                  .locked, .code_err(cerr), .hit_count(hcount));
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put_char(logic [7:0] d, logic k);
    logic [9:0] c = enc8b10b(d, k, rd);
    for (int i = 0; i < 10; i++) bits.push_back(c[i]);
  endtask
  task automatic put_idle(int n);
    repeat (n) put_char(8'hBC, 1'b1);
  endtask
  task automatic put_hit(bit expect_it);
    hit_t h;
    logic [31:0] w;
    h.chan = 5'($urandom_range(0, 23)); h.le_time = 17'($urandom); h.width = 8'($urandom);
    w = tdc_word(h.chan, h.le_time, h.width);
    for (int b = 3; b >= 0; b--) put_char(w[8*b +: 8], 1'b0);
    if (expect_it) expq.push_back(h);
  endtask

  // feed 16 bits per frame
  always @(posedge clk) begin
    if (!rst && bits.size() >= 16) begin
      for (int i = 0; i < 8; i++) begin
        eb[i] <= bits.pop_front();
        ob[i] <= bits.pop_front();
      end
      iv <= 1;
    end else iv <= 0;
  end

  always @(posedge clk) if (!rst) begin
    if (hv) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected hit"); end
      else begin
        hit_t e;
        e = expq.pop_front();
        if (e != hit) begin failures++; $display("hit mismatch got %h exp %h", hit, e); end
      end
    end
    if (cerr) nerr++;
  end

  initial begin
    eb = 0; ob = 0; iv = 0;
    repeat (int'($urandom_range(1, 9))) bits.push_back(1'($urandom));  // random phase
    put_idle(6);
    for (int n = 0; n < 60; n++) begin
      put_hit(1);
      if ($urandom_range(0, 2) != 0) put_idle($urandom_range(1, 4));
    end
    put_idle(4);
    repeat (5) @(posedge clk);
    rst <= 0;
    wait (bits.size() < 16);
    repeat (10) @(posedge clk);
    checks++;
    if (!locked) begin failures++; $display("not locked"); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d hits missing", expq.size()); end
    checks++;
    if (hcount != 60) begin failures++; $display("hit_count %0d", hcount); end
    // corrupt one character inside a word, then recover
    put_idle(3);
    put_hit(0);
    for (int i = 0; i < 10; i++) bits[bits.size() - 25 + i] = 1'b0; // 2nd byte -> all zero, invalid
    put_idle(5);
    for (int n = 0; n < 10; n++) begin put_hit(1); put_idle(1); end
    put_idle(4);
    wait (bits.size() < 16);
    repeat (10) @(posedge clk);
    checks++;
    if (nerr == 0) begin failures++; $display("code error not flagged"); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d hits missing after error", expq.size()); end
    checks++;
    if (!locked) begin failures++; $display("not relocked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
