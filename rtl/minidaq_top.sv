// minidaq_top: FPGA firmware of the MDT miniDAQ board.
//
// The miniDAQ reads out one (s)MDT chamber through two Chamber Service
// Modules (CSMs). Each CSM sends its mezzanine TDC data over two 10.24 Gbps
// uplink fibres; after the transceiver and lpGBT decoder (outside this
// module) every uplink delivers a 230-bit frame per 25 ns. The firmware
// keeps only hits that fall in a time window around a scintillator trigger:
//   uplinks:  4 x uplink_readout (10 TDC chains each: 8b/10b decode, hit RAM
//             with outdated-hit rejection, trigger matcher, matched FIFO)
//   trigger:  trig_coincidence -> fpga_tdc -> trig_delay -> trigger FIFO
//             -> trigger_dispatch (starts all 40 matchers at once)
//   output:   event_builder -> eth_tx (raw Ethernet frames, GMII byte port)
//   control:  uart_rx/uart_tx <-> ctrl_regs (registers, monitor read-back,
//             ENC commands) -> downlink_frame, same frame to both CSMs.
// The block structure is the source paper's; the single clock domain (one
// clk for the 40 MHz frame rate, trigger sampling and Ethernet bytes) is a
// simplification of this design: the clock-domain crossings of the real
// board are not modelled. Transceivers, lpGBT encoder/decoder IP, PHYs,
// comparators and the multi-phase sampling front end are outside; their
// signals are the ports.
module minidaq_top
  import minidaq_pkg::*;
#(
  parameter int unsigned N_UPLINK     = 4,
  parameter int unsigned N_SLOT       = 10,
  parameter int unsigned N_CSM        = 2,
  parameter int unsigned CLKS_PER_BIT = 347,
  localparam int unsigned N_TDC = N_UPLINK * N_SLOT
) (
  input  logic                               clk,
  input  logic                               rst,
  input  logic [N_UPLINK-1:0][FRAME_W-1:0]   uplink_frame,
  input  logic                               frame_valid,
  input  logic [3:0][N_SUB-1:0]              trig_samples,
  input  logic                               uart_rxd,
  output logic                               uart_txd,
  output logic [7:0]                         gmii_txd,
  output logic                               gmii_tx_en,
  output logic [N_CSM-1:0][31:0]             dl_user,
  output logic [N_CSM-1:0][1:0]              dl_ic,
  output logic [N_CSM-1:0][1:0]              dl_ec
);
  // ---------------- control ----------------
  cfg_t        cfg;
  logic [7:0]  rx_data, tx_data;
  logic        rx_valid, tx_valid, tx_ready;
  logic        bcr, sysrst, ic_load, ec_load, dl_busy;
  logic [31:0] ic_word, ec_word, status, trig_count, evt_count, rej_count, early_count, frames;
  logic [N_UPLINK-1:0][MON_W-1:0]      mon;
  logic [N_TDC-1:0][31:0]              hit_count;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_urx (.clk, .rst, .rx(uart_rxd), .data(rx_data), .valid(rx_valid));
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_utx (.clk, .rst, .data(tx_data), .valid(tx_valid), .ready(tx_ready), .tx(uart_txd));

  ctrl_regs #(.N_UPLINK(N_UPLINK), .N_TDC(N_TDC)) u_ctrl (
    .clk, .rst, .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready, .cfg,
    .bcr_pulse(bcr), .rst_pulse(sysrst), .ic_word, .ic_load, .ec_word, .ec_load,
    .mon, .hit_count, .status, .trig_count, .evt_count, .rej_count, .early_count,
    .frame_count(frames)
  );

  logic [31:0] dl_user_w;
  logic [1:0]  dl_ic_w, dl_ec_w;
  downlink_frame u_dl (
    .clk, .rst, .bcr, .sysrst, .ic_word, .ic_load, .ec_word, .ec_load,
    .user(dl_user_w), .ic(dl_ic_w), .ec(dl_ec_w), .busy(dl_busy)
  );
  always_comb
    for (int c = 0; c < N_CSM; c++) begin
      dl_user[c] = dl_user_w;
      dl_ic[c]   = dl_ic_w;
      dl_ec[c]   = dl_ec_w;
    end

  // ---------------- trigger path ----------------
  logic [N_SUB-1:0] coinc;
  logic             t_valid, d_valid, tf_full, tf_empty, tf_pop;
  tdc_time_t        t_time, d_time, tf_time;
  logic [BC_W-1:0]  bc;

  trig_coincidence #(.N_IN(4), .N_SUB(N_SUB)) u_coinc (
    .clk, .rst, .samples(trig_samples), .mask(cfg.coinc_mask), .coinc
  );
  fpga_tdc u_ftdc (
    .clk, .rst, .coinc, .bcr, .trig_valid(t_valid), .trig_time(t_time), .bc
  );
  trig_delay #(.MAX_DELAY(256)) u_delay (
    .clk, .rst, .in_valid(t_valid), .in_time(t_time), .delay(cfg.trig_delay),
    .out_valid(d_valid), .out_time(d_time)
  );
  sync_fifo #(.WIDTH(TIME_W), .DEPTH(16)) u_tfifo (
    .clk, .rst, .wr_en(d_valid && !tf_full), .wr_data(d_time), .full(tf_full),
    .rd_en(tf_pop), .rd_data(tf_time), .empty(tf_empty), .count()
  );

  // ---------------- dispatch and uplinks ----------------
  logic [N_TDC-1:0]        busy, m_empty, m_pop, locked, code_err, rejected, overflow, early;
  match_word_t [N_TDC-1:0] m_data;
  logic                    start, evt_wr, ef_full, ef_empty, ef_pop;
  tdc_time_t               start_time;
  logic [EVT_ID_W-1:0]     evt_id;
  logic [EVT_ID_W+TIME_W-1:0] ef_data;
  tdc_time_t               now_time;

  assign now_time = {bc, FINE_W'(0)};

  trigger_dispatch #(.N_TDC(N_TDC)) u_disp (
    .clk, .rst, .trig_valid(!tf_empty), .trig_time(tf_time), .trig_pop(tf_pop), .busy,
    .start, .start_time, .evt_wr, .evt_id, .evt_full(ef_full)
  );
  sync_fifo #(.WIDTH(EVT_ID_W+TIME_W), .DEPTH(16)) u_efifo (
    .clk, .rst, .wr_en(evt_wr), .wr_data({evt_id, start_time}), .full(ef_full),
    .rd_en(ef_pop), .rd_data(ef_data), .empty(ef_empty), .count()
  );

  for (genvar u = 0; u < N_UPLINK; u++) begin : g_up
    uplink_readout #(.N_SLOT(N_SLOT)) u_up (
      .clk, .rst, .frame(uplink_frame[u]), .frame_valid, .now_time, .cfg, .start, .start_time,
      .busy(busy[u*N_SLOT +: N_SLOT]), .m_data(m_data[u*N_SLOT +: N_SLOT]),
      .m_empty(m_empty[u*N_SLOT +: N_SLOT]), .m_pop(m_pop[u*N_SLOT +: N_SLOT]), .mon(mon[u]),
      .hit_count(hit_count[u*N_SLOT +: N_SLOT]), .locked(locked[u*N_SLOT +: N_SLOT]),
      .code_err(code_err[u*N_SLOT +: N_SLOT]), .rejected(rejected[u*N_SLOT +: N_SLOT]),
      .overflow(overflow[u*N_SLOT +: N_SLOT]), .early_drop(early[u*N_SLOT +: N_SLOT])
    );
  end

  // ---------------- event building and Ethernet ----------------
  logic [EVT_W-1:0] ev_word;
  logic             ev_valid, ev_last, ev_ready;

  event_builder #(.N_TDC(N_TDC)) u_evb (
    .clk, .rst, .evt_valid(!ef_empty), .evt_id(ef_data[TIME_W +: EVT_ID_W]),
    .evt_time(ef_data[TIME_W-1:0]), .evt_pop(ef_pop), .m_data, .m_empty, .m_pop,
    .out_word(ev_word), .out_valid(ev_valid), .out_last(ev_last), .out_ready(ev_ready)
  );
  eth_tx u_eth (
    .clk, .rst, .in_word(ev_word), .in_valid(ev_valid), .in_last(ev_last), .in_ready(ev_ready),
    .txd(gmii_txd), .tx_en(gmii_tx_en), .frames
  );

  // ---------------- monitoring ----------------
  logic ovf_sticky, err_sticky;
  always_ff @(posedge clk) begin
    if (rst) begin
      trig_count  <= '0;
      evt_count   <= '0;
      rej_count   <= '0;
      early_count <= '0;
      ovf_sticky <= 1'b0;
      err_sticky <= 1'b0;
    end else begin
      if (d_valid) trig_count <= trig_count + 1'b1;
      rej_count   <= rej_count + 32'($countones(rejected));
      early_count <= early_count + 32'($countones(early));
      if (ev_valid && ev_ready && ev_last) evt_count <= evt_count + 1'b1;
      if (|overflow || (d_valid && tf_full)) ovf_sticky <= 1'b1;
      if (|code_err) err_sticky <= 1'b1;
    end
  end
  assign status = {16'($countones(locked)), 13'b0, err_sticky, ovf_sticky, dl_busy};
endmodule
