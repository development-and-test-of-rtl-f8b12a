// ctrl_regs: monitor and control block, driven by the PC over the UART.
//
// A tiny byte protocol (this design's own) reaches a 256-entry register
// space:
//   write:  'W' (8'h57), address, d[31:24], d[23:16], d[15:8], d[7:0]
//           -> reply 'K' (8'h4B)
//   read:   'R' (8'h52), address -> reply d[31:24], d[23:16], d[15:8], d[7:0]
// Unknown command bytes are ignored. Register map:
//   8'h00 R   identifier 32'h4D444151 ("MDAQ")
//   8'h01 W   bit0: send bunch count reset, bit1: send system reset (pulses)
//   8'h02 RW  coincidence mask [3:0]
//   8'h03 RW  trigger delay [7:0], 25 ns cycles
//   8'h04 RW  matching window offset [16:0], 0.78 ns bins
//   8'h05 RW  matching window width  [16:0]
//   8'h06 RW  rejection window       [16:0]
//   8'h07 RW  lpGBT IC configuration word (write sends it down)
//   8'h08 RW  GBT-SCA EC configuration word (write sends it down)
//   8'h09 R   status word from the datapath
//   8'h0A R   trigger count,  8'h0B R event count
//   8'h0C R   hits dropped as outdated,  8'h0D R hits discarded as too early
//   8'h0E R   Ethernet frames sent
//   8'h10 + 3u + j  R  monitor field of uplink u, 32-bit word j (j = 0..2)
//   8'h40 + t       R  hit counter of TDC t
// The source paper names this block (configuration, monitoring of voltages,
// temperatures and detector data, control of the trigger delay); the
// protocol, map and reset values are this design's.
// Timing: registers change the cycle after the last byte of a write.
module ctrl_regs
  import minidaq_pkg::*;
#(
  parameter int unsigned N_UPLINK = 4,
  parameter int unsigned N_TDC    = 40
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [7:0]                    rx_data,
  input  logic                          rx_valid,
  output logic [7:0]                    tx_data,
  output logic                          tx_valid,
  input  logic                          tx_ready,
  output cfg_t                          cfg,
  output logic                          bcr_pulse,
  output logic                          rst_pulse,
  output logic [31:0]                   ic_word,
  output logic                          ic_load,
  output logic [31:0]                   ec_word,
  output logic                          ec_load,
  input  logic [N_UPLINK-1:0][MON_W-1:0] mon,
  input  logic [N_TDC-1:0][31:0]        hit_count,
  input  logic [31:0]                   status,
  input  logic [31:0]                   trig_count,
  input  logic [31:0]                   evt_count,
  input  logic [31:0]                   rej_count,
  input  logic [31:0]                   early_count,
  input  logic [31:0]                   frame_count
);
  typedef enum logic [2:0] {S_CMD, S_ADDR, S_DATA, S_EXEC, S_REPLY} state_t;
  state_t      state;
  logic        is_write;
  logic [7:0]  addr;
  logic [31:0] wdata;
  logic [1:0]  nbyte;
  logic [31:0] rdata;
  logic [31:0] reply;
  logic [2:0]  nreply;     // bytes still to send

  // read multiplexer
  always_comb begin
    rdata = '0;
    unique case (addr)
      8'h00: rdata = 32'h4D44_4151;
      8'h02: rdata = 32'(cfg.coinc_mask);
      8'h03: rdata = 32'(cfg.trig_delay);
      8'h04: rdata = 32'(cfg.match_offset);
      8'h05: rdata = 32'(cfg.match_win);
      8'h06: rdata = 32'(cfg.reject_win);
      8'h07: rdata = ic_word;
      8'h08: rdata = ec_word;
      8'h09: rdata = status;
      8'h0A: rdata = trig_count;
      8'h0B: rdata = evt_count;
      8'h0C: rdata = rej_count;
      8'h0D: rdata = early_count;
      8'h0E: rdata = frame_count;
      default: begin
        for (int u = 0; u < N_UPLINK; u++)
          for (int j = 0; j < 3; j++)
            if (32'(addr) == 32'h10 + 32'(3*u + j))
              rdata = (j == 2) ? 32'(mon[u][MON_W-1:64]) : mon[u][32*j +: 32];
        for (int t = 0; t < N_TDC; t++)
          if (32'(addr) == 32'h40 + 32'(t)) rdata = hit_count[t];
      end
    endcase
  end

  assign tx_valid = (state == S_REPLY);
  assign tx_data  = reply[31:24];

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_CMD;
      is_write  <= 1'b0;
      addr      <= '0;
      wdata     <= '0;
      nbyte     <= '0;
      reply     <= '0;
      nreply    <= '0;
      bcr_pulse <= 1'b0;
      rst_pulse <= 1'b0;
      ic_load   <= 1'b0;
      ec_load   <= 1'b0;
      ic_word   <= '0;
      ec_word   <= '0;
      cfg.coinc_mask   <= 4'b0011;
      cfg.trig_delay   <= 8'd40;
      cfg.match_offset <= TIME_W'(64);
      cfg.match_win    <= TIME_W'(400);
      cfg.reject_win   <= TIME_W'(8192);
    end else begin
      bcr_pulse <= 1'b0;
      rst_pulse <= 1'b0;
      ic_load   <= 1'b0;
      ec_load   <= 1'b0;
      unique case (state)
        S_CMD: if (rx_valid) begin
          if (rx_data == 8'h57 || rx_data == 8'h52) begin
            is_write <= (rx_data == 8'h57);
            state    <= S_ADDR;
          end
        end
        S_ADDR: if (rx_valid) begin
          addr  <= rx_data;
          nbyte <= '0;
          state <= is_write ? S_DATA : S_EXEC;
        end
        S_DATA: if (rx_valid) begin
          wdata <= {wdata[23:0], rx_data};
          nbyte <= nbyte + 1'b1;
          if (nbyte == 2'd3) state <= S_EXEC;
        end
        S_EXEC: begin
          if (is_write) begin
            unique case (addr)
              8'h01: begin bcr_pulse <= wdata[0]; rst_pulse <= wdata[1]; end
              8'h02: cfg.coinc_mask   <= wdata[3:0];
              8'h03: cfg.trig_delay   <= wdata[7:0];
              8'h04: cfg.match_offset <= wdata[TIME_W-1:0];
              8'h05: cfg.match_win    <= wdata[TIME_W-1:0];
              8'h06: cfg.reject_win   <= wdata[TIME_W-1:0];
              8'h07: begin ic_word <= wdata; ic_load <= 1'b1; end
              8'h08: begin ec_word <= wdata; ec_load <= 1'b1; end
              default: ;
            endcase
            reply  <= {8'h4B, 24'h0};
            nreply <= 3'd1;
          end else begin
            reply  <= rdata;
            nreply <= 3'd4;
          end
          state <= S_REPLY;
        end
        S_REPLY: if (tx_ready) begin
          reply  <= {reply[23:0], 8'h00};
          nreply <= nreply - 1'b1;
          if (nreply == 3'd1) state <= S_CMD;
        end
        default: state <= S_CMD;
      endcase
    end
  end
endmodule
