// minidaq_pkg: types and constants shared by the miniDAQ readout firmware.
//
// Time stamps follow the MDT TDC ASIC: a 12-bit bunch counter (25 ns) and a
// 5-bit fine time (32 bins of 0.78125 ns), 17 bits in all. The FPGA-TDC that
// time-stamps the scintillator trigger uses the same format, so hit and
// trigger times can be subtracted directly (modulo 2^17, 102.4 us).
// The word layouts below are this design's own choices: the source paper
// names the data flow but gives no bit formats.
package minidaq_pkg;

  localparam int unsigned TIME_W   = 17;  // {bunch count[11:0], fine[4:0]}
  localparam int unsigned BC_W     = 12;
  localparam int unsigned FINE_W   = 5;
  localparam int unsigned N_SUB    = 32;  // sub-bins per 25 ns bunch
  localparam int unsigned CHAN_W   = 5;   // 24 channels per TDC
  localparam int unsigned WIDTH_W  = 8;   // pulse width (charge) field
  localparam int unsigned EVT_ID_W = 12;
  localparam int unsigned EVT_W    = 40;  // event word, 5 bytes
  localparam int unsigned FRAME_W  = 230; // lpGBT uplink user frame
  localparam int unsigned MON_W    = 70;  // monitor part of the frame

  typedef logic [TIME_W-1:0] tdc_time_t;

  // One decoded hit as kept in the raw-data buffer.
  typedef struct packed {
    logic [CHAN_W-1:0]  chan;
    tdc_time_t          le_time;
    logic [WIDTH_W-1:0] width;
  } hit_t;                                 // 30 bits

  // Entry of a matched-data FIFO: a hit, or the end marker of one trigger.
  typedef struct packed {
    logic eot;
    hit_t hit;
  } match_word_t;                          // 31 bits

  // Event word type codes (bits [39:36]).
  localparam logic [3:0] EVT_HDR = 4'hA;
  localparam logic [3:0] EVT_HIT = 4'h1;
  localparam logic [3:0] EVT_TRL = 4'hC;

  // 8b/10b K28.5 comma in transmission order a..j (bit 0 = a).
  localparam logic [9:0] K285_NEG = 10'b0101111100; // abcdei fghj = 001111 1010
  localparam logic [9:0] K285_POS = 10'b1010000011; // abcdei fghj = 110000 0101

  // ENC command bytes placed in the downlink user frame.
  localparam logic [7:0] ENC_IDLE = 8'h00;
  localparam logic [7:0] ENC_BCR  = 8'hB4;
  localparam logic [7:0] ENC_RST  = 8'hE1;

  // Run-time configuration set through the UART command interface.
  typedef struct packed {
    logic [3:0]  coinc_mask;   // trigger inputs taking part in the coincidence
    logic [7:0]  trig_delay;   // trigger latency, 25 ns cycles
    tdc_time_t   match_offset; // window opens this many bins before the trigger
    tdc_time_t   match_win;    // window width, bins
    tdc_time_t   reject_win;   // hits older than this are dropped from the buffers
  } cfg_t;

endpackage
