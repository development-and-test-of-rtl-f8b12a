// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags and the count, and that the FIFO fills to exactly
// DEPTH entries.
module tb_sync_fifo;
  logic clk = 0, rst = 1;
  logic wr_en, rd_en, full, empty;
  logic [31:0] wr_data, rd_data;
  logic [4:0] count;
  logic [31:0] model[$];
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(32), .DEPTH(16)) dut (.clk, .rst, .wr_en, .wr_data, .full, .rd_en, .rd_data, .empty, .count);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      checks += 3;
      if (empty != (model.size() == 0)) begin failures++; $display("empty flag"); end
      if (full != (model.size() == 16)) begin failures++; $display("full flag"); end
      if (count != 5'(model.size())) begin failures++; $display("count %0d vs %0d", count, model.size()); end
      if (!empty) begin
        checks++;
        if (rd_data != model[0]) begin failures++; $display("data %h vs %h", rd_data, model[0]); end
      end
      // phase 1 favours writes (fill up), phase 2 favours reads
      wr_en   = !full && ($urandom_range(0, 9) < ((n % 400) < 200 ? 8 : 3));
      rd_en   = !empty && ($urandom_range(0, 9) < ((n % 400) < 200 ? 3 : 8));
      wr_data = $urandom;
      @(negedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
      wr_en = 0; rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
