// cryo_pkg: constants shared by the cryogenic TDC platform.
//
// The delay-line length (200 stages = 50 CARRY4 blocks), the tap delay
// (about 20 ps), the histogram geometry (200 bins of 16 bits) and the
// 6-phase ADC interleaving are the figures of the platform this RTL follows.
// The UART command bytes, the code width and the UART bit time are this
// design's own choices.
`timescale 1ps/1ps
package cryo_pkg;

  // Tapped delay line / TDC
  localparam int TDC_TAPS   = 200;   // 50 CARRY4 blocks x 4 stages
  localparam int TDC_TAP_PS = 20;    // nominal delay of one carry stage
  localparam int TDC_CODE_W = 8;     // enough for codes 0..200
  localparam int TDC_CLK_PS = 2500;  // 400 MHz sampling clock
  localparam int TDC_WINDOW = TDC_CLK_PS / TDC_TAP_PS;  // stages per clock period

  // Histogrammer
  localparam int HIST_BINS  = 200;   // one bin per delay stage
  localparam int HIST_COUNT_W = 16;    // counter width of each bin

  // UART host link (8 data bits, no parity, 1 stop bit)
  // 100 MHz / 868 = 115.2 kBd, below the 1 MHz limit of the long cables.
  localparam int UART_CLKS_PER_BIT = 868;

  // Host commands, one ASCII byte each
  typedef enum logic [7:0] {
    CMD_GO    = 8'h47,  // 'G' start acquiring
    CMD_HALT  = 8'h48,  // 'H' stop acquiring
    CMD_CLEAR = 8'h43,  // 'C' clear all bins
    CMD_READ  = 8'h52,  // 'R' send all bins, 2 bytes each, MSB first
    CMD_CAL   = 8'h57   // 'W' ch addr data: write an ADC calibration word
  } cmd_e;

  // Interleaved ADC
  localparam int ADC_CH      = 6;    // phases of the 200 MHz ramp clock
  localparam int ADC_SAMPLE_W = 8;   // calibrated sample width
  localparam int ADC_TS_W     = 8;   // time stamp within one ramp period
  localparam int TDC_PER_RAMP = 2;   // 400 MHz cycles per 200 MHz ramp period

  // Status pins of the top level (debug header / monitoring)
  typedef struct packed {
    logic running;    // acquisition enabled by the host
    logic clearing;   // histogram clear sweep in progress (clk_tdc)
    logic fwd;        // histogram increment forwarded this cycle (clk_tdc)
    logic paused;     // readout paused a running acquisition (clk_sys pulse)
    logic rx_err;     // UART frame error (clk_sys pulse)
    logic cal_busy;   // ADC calibration tables being initialised (clk_tdc)
  } status_t;

endpackage
