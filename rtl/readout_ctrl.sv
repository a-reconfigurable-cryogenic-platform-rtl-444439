// readout_ctrl: host command decoder and histogram readout for the TDC
// platform, in the system clock domain.
//
// It takes one-byte commands from the UART receiver:
//   'G' start acquiring   'H' stop acquiring
//   'C' clear all bins    'R' send all bins
//   'W' c a d  write value d at address a of ADC channel c's calibration
//              table (three more bytes follow the 'W')
// 'R' sends N_BINS words of COUNT_W (16) bits, two bytes per bin, most
// significant byte first, bin 0 first. If the histogram is counting when
// 'R' arrives, counting is paused, the controller waits SETTLE cycles for
// hits already in flight to land, reads every bin and then resumes. 'C'
// raises clear_req_o and holds it until clear_ack_o is seen, then waits for
// the acknowledge to drop (four-phase handshake with the clk_tdc domain);
// acquisition state is kept. 'W' collects its three bytes, then holds
// cal_req_o high with the word on cal_ch_o/cal_addr_o/cal_data_o until
// cal_ack_i rises, and waits for it to fall. Unknown bytes are ignored.
//
// Flow control: uart_cts_n_o is low (ready) only while the controller is
// idle and can take the next command byte; the receiver has no FIFO.
// Timing: one bin costs one read cycle plus two UART frames.
// That the histogram is read out over the UART to the host follows the
// platform; the command set, byte order, pausing and flow control are this
// design's choices.
`timescale 1ps/1ps
module readout_ctrl
  import cryo_pkg::*;
#(
  parameter int N_BINS  = HIST_BINS,
  parameter int COUNT_W = HIST_COUNT_W,
  parameter int SETTLE  = 4,
  localparam int ADDR_W = $clog2(N_BINS)
) (
  input  logic               clk,
  input  logic               rst,
  // UART receiver / transmitter
  input  logic [7:0]         rx_data_i,
  input  logic               rx_valid_i,
  output logic [7:0]         tx_data_o,
  output logic               tx_valid_o,
  input  logic               tx_ready_i,
  output logic               cts_n_o,
  // histogrammer
  output logic               acq_en_o,
  output logic               clear_req_o,
  input  logic               clear_ack_i,   // synchronised into clk
  output logic               rd_en_o,
  output logic [ADDR_W-1:0]  rd_addr_o,
  input  logic [COUNT_W-1:0] rd_data_i,
  // ADC calibration table
  output logic               cal_req_o,
  input  logic               cal_ack_i,     // synchronised into clk
  output logic [7:0]         cal_ch_o,
  output logic [7:0]         cal_addr_o,
  output logic [7:0]         cal_data_o,
  // status
  output logic               running_o,
  output logic               paused_o       // 'R' arrived while counting
);

  typedef enum logic [3:0] {
    S_IDLE, S_SETTLE, S_RD, S_RD_WAIT, S_SEND_HI, S_SEND_LO, S_CLR_REQ, S_CLR_REL,
    S_W_CH, S_W_ADDR, S_W_DATA, S_W_REQ, S_W_REL
  } state_e;

  localparam int SET_W = $clog2(SETTLE + 1);

  state_e             state_q;
  logic               running_q;
  logic [SET_W-1:0]   settle_q;
  logic [ADDR_W-1:0]  addr_q;
  logic [COUNT_W-1:0] word_q;
  logic               last_bin;

  assign last_bin    = (32'(addr_q) == N_BINS - 1);
  assign running_o   = running_q;
  assign acq_en_o    = running_q && !(state_q inside {S_SETTLE, S_RD, S_RD_WAIT, S_SEND_HI, S_SEND_LO});
  assign cts_n_o     = !(state_q inside {S_IDLE, S_W_CH, S_W_ADDR, S_W_DATA});
  assign cal_req_o   = (state_q == S_W_REQ);
  assign clear_req_o = (state_q == S_CLR_REQ);
  assign rd_en_o     = (state_q == S_RD);
  assign rd_addr_o   = addr_q;
  assign tx_valid_o  = (state_q == S_SEND_HI) || (state_q == S_SEND_LO);
  assign tx_data_o   = (state_q == S_SEND_HI) ? word_q[COUNT_W-1 -: 8] : word_q[7:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q   <= S_IDLE;
      running_q <= 1'b0;
      settle_q  <= '0;
      addr_q    <= '0;
      word_q    <= '0;
      paused_o  <= 1'b0;
      cal_ch_o   <= '0;
      cal_addr_o <= '0;
      cal_data_o <= '0;
    end else begin
      paused_o <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (rx_valid_i) begin
            unique case (rx_data_i)
              CMD_GO:    running_q <= 1'b1;
              CMD_HALT:  running_q <= 1'b0;
              CMD_CLEAR: state_q   <= S_CLR_REQ;
              CMD_CAL:   state_q   <= S_W_CH;
              CMD_READ: begin
                addr_q   <= '0;
                settle_q <= SET_W'(SETTLE);
                paused_o <= running_q;
                state_q  <= S_SETTLE;
              end
              default: ;
            endcase
          end
        end
        S_SETTLE: begin
          if (settle_q == '0) state_q <= S_RD;
          else                settle_q <= settle_q - SET_W'(1);
        end
        S_RD:      state_q <= S_RD_WAIT;
        S_RD_WAIT: begin
          word_q  <= rd_data_i;
          state_q <= S_SEND_HI;
        end
        S_SEND_HI: if (tx_ready_i) state_q <= S_SEND_LO;
        S_SEND_LO: begin
          if (tx_ready_i) begin
            if (last_bin) begin
              state_q <= S_IDLE;
            end else begin
              addr_q  <= addr_q + ADDR_W'(1);
              state_q <= S_RD;
            end
          end
        end
        S_W_CH:   if (rx_valid_i) begin cal_ch_o   <= rx_data_i; state_q <= S_W_ADDR; end
        S_W_ADDR: if (rx_valid_i) begin cal_addr_o <= rx_data_i; state_q <= S_W_DATA; end
        S_W_DATA: if (rx_valid_i) begin cal_data_o <= rx_data_i; state_q <= S_W_REQ;  end
        S_W_REQ:  if (cal_ack_i)  state_q <= S_W_REL;
        S_W_REL:  if (!cal_ack_i) state_q <= S_IDLE;
        S_CLR_REQ: if (clear_ack_i)  state_q <= S_CLR_REL;
        S_CLR_REL: if (!clear_ack_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
