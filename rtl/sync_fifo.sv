// sync_fifo: single-clock first-in first-out buffer.
//
// Used as the trigger FIFO between the trigger delay line and the trigger
// dispatcher, as the per-TDC matched-data buffer and as the event-header
// queue. Storage is a plain array (maps to block or distributed RAM).
// Read is first-word-fall-through: rd_data shows the oldest entry whenever
// empty is low, and rd_en removes it. A write while full or a read while
// empty is ignored; the assertions flag either as a protocol error.
// Depth must be a power of two. Timing: a written word is readable the next
// cycle.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp, rp;

  assign count   = wp - rp;
  assign empty   = (wp == rp);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty));
endmodule
