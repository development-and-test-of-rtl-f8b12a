// event_builder: assembles one event per trigger from the matched-data
// FIFOs of all TDCs.
//
// For each queued trigger it writes a header word, then visits TDC 0, 1, ...
// N_TDC-1 in turn, copying that TDC's matched hits until it reads the TDC's
// end-of-trigger marker, and closes with a trailer carrying the hit count.
// It waits on an empty FIFO, since the matcher of that TDC has not finished
// yet. Event words are 40 bits:
//   header  {4'hA, event id[11:0], 7'b0, trigger time[16:0]}
//   hit     {4'h1, tdc[5:0], channel[4:0], leading-edge time[16:0], width[7:0]}
//   trailer {4'hC, event id[11:0], 12'b0, hit count[11:0]}
// Packing the matched hits with the trigger data into an event is the
// source paper's; the word layout and TDC order are this design's.
// Output handshake: out_word is taken when out_valid && out_ready;
// out_last marks the trailer. One word per cycle when not stalled.
module event_builder
  import minidaq_pkg::*;
#(
  parameter int unsigned N_TDC = 40,
  localparam int unsigned TW = (N_TDC > 1) ? $clog2(N_TDC) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     evt_valid,
  input  logic [EVT_ID_W-1:0]      evt_id,
  input  tdc_time_t                evt_time,
  output logic                     evt_pop,
  input  match_word_t [N_TDC-1:0]  m_data,
  input  logic [N_TDC-1:0]         m_empty,
  output logic [N_TDC-1:0]         m_pop,
  output logic [EVT_W-1:0]         out_word,
  output logic                     out_valid,
  output logic                     out_last,
  input  logic                     out_ready
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_HITS, S_TRL} state_t;
  state_t       state;
  logic [TW-1:0] tdc;
  logic [11:0]  nhits;
  match_word_t  cur;
  logic         cur_empty;

  assign cur       = m_data[tdc];
  assign cur_empty = m_empty[tdc];

  always_comb begin
    out_valid = 1'b0;
    out_last  = 1'b0;
    out_word  = '0;
    m_pop     = '0;
    evt_pop   = 1'b0;
    unique case (state)
      S_HDR: begin
        out_valid = 1'b1;
        out_word  = {EVT_HDR, evt_id, 7'b0, evt_time};
      end
      S_HITS: if (!cur_empty) begin
        if (cur.eot) begin
          m_pop[tdc] = 1'b1;
        end else begin
          out_valid  = 1'b1;
          out_word   = {EVT_HIT, 6'(tdc), cur.hit.chan, cur.hit.le_time, cur.hit.width};
          m_pop[tdc] = out_ready;
        end
      end
      S_TRL: begin
        out_valid = 1'b1;
        out_last  = 1'b1;
        out_word  = {EVT_TRL, evt_id, 12'b0, nhits};
        evt_pop   = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      tdc   <= '0;
      nhits <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (evt_valid) begin
          state <= S_HDR;
          tdc   <= '0;
          nhits <= '0;
        end
        S_HDR: if (out_ready) state <= S_HITS;
        S_HITS: if (!cur_empty) begin
          if (cur.eot) begin
            if (tdc == TW'(N_TDC-1)) state <= S_TRL;
            else tdc <= tdc + 1'b1;
          end else if (out_ready) begin
            nhits <= nhits + 1'b1;
          end
        end
        S_TRL: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
