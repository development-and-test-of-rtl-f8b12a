// uplink_readout: the readout chain of one CSM uplink fibre.
//
// The decoded 230-bit lpGBT frame is split (uplink_demux) into the 10 TDC
// slots and the monitor field. Each slot has its own chain, all running in
// parallel: tdc_decode (even/odd merge, 8b/10b, idle removal), hit_buffer
// (RAM with outdated-hit rejection), trigger_matcher and a matched-data
// FIFO read by the event builder. All matchers of all uplinks receive the
// same start/trigger time from the trigger dispatcher.
// Structure after the source paper's decoding and firmware block diagrams;
// buffer depths are this design's.
module uplink_readout
  import minidaq_pkg::*;
#(
  parameter int unsigned N_SLOT      = 10,
  parameter int unsigned HIT_DEPTH   = 256,
  parameter int unsigned MATCH_DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [FRAME_W-1:0]         frame,
  input  logic                       frame_valid,
  input  tdc_time_t                  now_time,
  input  cfg_t                       cfg,
  input  logic                       start,
  input  tdc_time_t                  start_time,
  output logic [N_SLOT-1:0]          busy,
  output match_word_t [N_SLOT-1:0]   m_data,
  output logic [N_SLOT-1:0]          m_empty,
  input  logic [N_SLOT-1:0]          m_pop,
  output logic [MON_W-1:0]           mon,
  output logic [N_SLOT-1:0][31:0]    hit_count,
  output logic [N_SLOT-1:0]          locked,
  output logic [N_SLOT-1:0]          code_err,
  output logic [N_SLOT-1:0]          rejected,
  output logic [N_SLOT-1:0]          overflow,
  output logic [N_SLOT-1:0]          early_drop
);
  logic [N_SLOT-1:0][7:0] s_even, s_odd;
  logic [N_SLOT-1:0][$clog2(HIT_DEPTH):0] level;   // buffer fill, kept for debug visibility
  logic                   s_valid;

  uplink_demux #(.N_SLOT(N_SLOT)) u_demux (
    .clk, .rst, .frame, .frame_valid,
    .slot_even(s_even), .slot_odd(s_odd), .mon, .slot_valid(s_valid)
  );

  for (genvar k = 0; k < N_SLOT; k++) begin : g_slot
    hit_t        hit, head;
    logic        hit_valid, head_valid, pop, mvalid, mfull;
    match_word_t mword;

    tdc_decode u_dec (
      .clk, .rst, .even_byte(s_even[k]), .odd_byte(s_odd[k]), .in_valid(s_valid),
      .hit, .hit_valid, .locked(locked[k]), .code_err(code_err[k]), .hit_count(hit_count[k])
    );

    hit_buffer #(.DEPTH(HIT_DEPTH)) u_buf (
      .clk, .rst, .wr_hit(hit), .wr_en(hit_valid), .now_time, .reject_win(cfg.reject_win),
      .hold(busy[k]), .head, .head_valid, .pop, .rejected(rejected[k]), .overflow(overflow[k]),
      .level(level[k])
    );

    trigger_matcher u_match (
      .clk, .rst, .start, .trig_time(start_time), .match_offset(cfg.match_offset),
      .match_win(cfg.match_win), .head, .head_valid, .pop, .busy(busy[k]),
      .out_data(mword), .out_valid(mvalid), .out_ready(!mfull), .early_drop(early_drop[k])
    );

    sync_fifo #(.WIDTH($bits(match_word_t)), .DEPTH(MATCH_DEPTH)) u_mfifo (
      .clk, .rst, .wr_en(mvalid && !mfull), .wr_data(mword), .full(mfull),
      .rd_en(m_pop[k]), .rd_data(m_data[k]), .empty(m_empty[k]), .count()
    );
  end
endmodule
