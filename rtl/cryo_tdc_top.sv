// cryo_tdc_top: the TDC measurement platform of the cryogenic FPGA.
//
// A signal edge on hit_i runs down a 200-stage carry-chain delay line.
// The taps are sampled by the 400 MHz clock (clk_tdc) and encoded into a
// fine time code, the code's bin in a 200 x 16-bit histogram is
// incremented, and the host controls acquisition and reads the histogram
// over a UART (RX, TX and a CTS flow-control line) that runs from the
// 100 MHz clock (clk_sys). Both clocks come from the FPGA's clock manager,
// which is outside this RTL; they are treated as asynchronous, so every
// control signal crosses through a two-flop synchroniser.
//
// The same TDC channel, six times over, digitises the platform's ADC: the
// six comparator outputs on adc_hit_i (LVDS receivers comparing the analog
// input with six RC ramps on six phases of a 200 MHz clock; the ramps and
// comparators are analog and outside this RTL) are time-stamped and
// adc_merge turns the stamps into one calibrated 1.2 GSa/s stream: every
// 5 ns adc_frame_o pulses with six samples on adc_sample_o.
//
// Data path (clk_tdc): tdc_carry_chain -> tdc_encoder -> tdc_histogrammer,
// and 6 x (tdc_carry_chain -> tdc_encoder) -> adc_merge.
// Control path (clk_sys): uart_rx -> readout_ctrl -> uart_tx, with
// readout_ctrl reading the histogram through its second memory port.
// rst_ni is the asynchronous, active-low board reset; each clock domain
// gets its own synchronously released copy.
//
// The chain length, sampling rate, histogram geometry and UART readout
// follow the platform; the clock crossing scheme, the command protocol and
// the reset scheme are this design's choices.
// The host sends the ADC channel number as a whole byte; only its low
// three bits select one of the six channels, so the upper five bits of
// cal_ch are left unused on purpose.
`timescale 1ps/1ps
module cryo_tdc_top
  import cryo_pkg::*;
#(
  parameter int N_TAPS       = TDC_TAPS,
  parameter int TAP_PS       = TDC_TAP_PS,
  parameter int N_BINS       = HIST_BINS,
  parameter int COUNT_W      = HIST_COUNT_W,
  parameter int CLKS_PER_BIT = UART_CLKS_PER_BIT
) (
  input  logic clk_sys_i,     // 100 MHz logic clock
  input  logic clk_tdc_i,     // 400 MHz sampling clock
  input  logic rst_ni,
  input  logic hit_i,         // signal to be time-stamped
  input  logic uart_rx_i,
  output logic uart_tx_o,
  output logic uart_cts_n_o,
  // interleaved ADC
  input  logic [ADC_CH-1:0]       adc_hit_i,      // comparator outputs
  output logic                    adc_frame_o,
  output logic [ADC_CH-1:0]       adc_valid_o,
  output logic [ADC_SAMPLE_W-1:0] adc_sample_o [ADC_CH],
  output status_t                 status_o
);

  localparam int ADDR_W = $clog2(N_BINS);

  logic rst_sys, rst_tdc;

  reset_sync u_rst_sys (.clk(clk_sys_i), .rst_ni(rst_ni), .rst_o(rst_sys));
  reset_sync u_rst_tdc (.clk(clk_tdc_i), .rst_ni(rst_ni), .rst_o(rst_tdc));

  // ---- clk_tdc domain --------------------------------------------------------
  logic [N_TAPS-1:0]     taps;
  logic                  hit_valid;
  logic [TDC_CODE_W-1:0] hit_code;
  logic                  acq_en_tdc, clear_req_tdc, clear_ack_tdc;
  logic                  clearing, fwd;

  tdc_carry_chain #(.N_TAPS(N_TAPS), .TAP_PS(TAP_PS)) u_chain (
    .hit_i (hit_i),
    .taps_o(taps)
  );

  tdc_encoder #(.N_TAPS(N_TAPS), .CODE_W(TDC_CODE_W)) u_enc (
    .clk    (clk_tdc_i),
    .rst    (rst_tdc),
    .taps_i (taps),
    .valid_o(hit_valid),
    .code_o (hit_code)
  );

  // ---- clock crossings ---------------------------------------------------------
  // Levels and handshake lines go through two-flop synchronisers. The
  // calibration word (cal_ch/addr/data) is not synchronised: it is stable
  // for at least one clk_sys cycle before its request and until the
  // acknowledge returns.
  logic acq_en_sys, clear_req_sys, clear_ack_sys;
  logic cal_req_sys, cal_ack_sys, cal_req_tdc, cal_ack_tdc;
  logic [7:0] cal_ch, cal_addr, cal_data;

  cdc_sync #(.WIDTH(3)) u_sync_to_tdc (
    .clk(clk_tdc_i), .rst(rst_tdc),
    .d_i({acq_en_sys, clear_req_sys, cal_req_sys}),
    .q_o({acq_en_tdc, clear_req_tdc, cal_req_tdc})
  );

  cdc_sync #(.WIDTH(2)) u_sync_to_sys (
    .clk(clk_sys_i), .rst(rst_sys),
    .d_i({clear_ack_tdc, cal_ack_tdc}),
    .q_o({clear_ack_sys, cal_ack_sys})
  );

  // ---- interleaved ADC (clk_tdc) ------------------------------------------------
  logic [ADC_CH-1:0]     adc_code_v;
  logic [TDC_CODE_W-1:0] adc_code [ADC_CH];
  logic                  cal_busy;

  for (genvar k = 0; k < ADC_CH; k++) begin : g_adc_ch
    logic [N_TAPS-1:0] adc_taps;

    tdc_carry_chain #(.N_TAPS(N_TAPS), .TAP_PS(TAP_PS)) u_chain (
      .hit_i (adc_hit_i[k]),
      .taps_o(adc_taps)
    );

    tdc_encoder #(.N_TAPS(N_TAPS), .CODE_W(TDC_CODE_W)) u_enc (
      .clk    (clk_tdc_i),
      .rst    (rst_tdc),
      .taps_i (adc_taps),
      .valid_o(adc_code_v[k]),
      .code_o (adc_code[k])
    );
  end

  adc_merge #(
    .NCH(ADC_CH), .CODE_W(TDC_CODE_W), .TS_W(ADC_TS_W), .SAMPLE_W(ADC_SAMPLE_W),
    .CPR(TDC_PER_RAMP), .FINE(2500 / TAP_PS)
  ) u_adc (
    .clk        (clk_tdc_i),
    .rst        (rst_tdc),
    .ch_valid_i (adc_code_v),
    .ch_code_i  (adc_code),
    .cal_req_i  (cal_req_tdc),
    .cal_ack_o  (cal_ack_tdc),
    .cal_ch_i   (cal_ch[$clog2(ADC_CH)-1:0]),
    .cal_addr_i (cal_addr[ADC_TS_W-1:0]),
    .cal_data_i (cal_data[ADC_SAMPLE_W-1:0]),
    .cal_busy_o (cal_busy),
    .frame_o    (adc_frame_o),
    .smp_valid_o(adc_valid_o),
    .smp_o      (adc_sample_o)
  );

  // ---- histogram (both domains) -----------------------------------------------
  logic               rd_en;
  logic [ADDR_W-1:0]  rd_addr;
  logic [COUNT_W-1:0] rd_data;

  tdc_histogrammer #(.N_BINS(N_BINS), .COUNT_W(COUNT_W), .CODE_W(TDC_CODE_W)) u_hist (
    .clk_tdc    (clk_tdc_i),
    .rst_tdc    (rst_tdc),
    .acq_en_i   (acq_en_tdc),
    .hit_valid_i(hit_valid),
    .hit_code_i (hit_code),
    .clear_req_i(clear_req_tdc),
    .clear_ack_o(clear_ack_tdc),
    .clearing_o (clearing),
    .fwd_o      (fwd),
    .clk_sys    (clk_sys_i),
    .rd_en_i    (rd_en),
    .rd_addr_i  (rd_addr),
    .rd_data_o  (rd_data)
  );

  // ---- clk_sys domain ----------------------------------------------------------
  logic [7:0] rx_data, tx_data;
  logic       rx_valid, rx_err, tx_valid, tx_ready, paused, running;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart_rx (
    .clk(clk_sys_i), .rst(rst_sys), .rx_i(uart_rx_i),
    .data_o(rx_data), .valid_o(rx_valid), .frame_err_o(rx_err)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart_tx (
    .clk(clk_sys_i), .rst(rst_sys), .data_i(tx_data), .valid_i(tx_valid),
    .ready_o(tx_ready), .tx_o(uart_tx_o)
  );

  readout_ctrl #(.N_BINS(N_BINS), .COUNT_W(COUNT_W)) u_ctrl (
    .clk        (clk_sys_i),
    .rst        (rst_sys),
    .rx_data_i  (rx_data),
    .rx_valid_i (rx_valid),
    .tx_data_o  (tx_data),
    .tx_valid_o (tx_valid),
    .tx_ready_i (tx_ready),
    .cts_n_o    (uart_cts_n_o),
    .acq_en_o   (acq_en_sys),
    .clear_req_o(clear_req_sys),
    .clear_ack_i(clear_ack_sys),
    .rd_en_o    (rd_en),
    .rd_addr_o  (rd_addr),
    .rd_data_i  (rd_data),
    .cal_req_o  (cal_req_sys),
    .cal_ack_i  (cal_ack_sys),
    .cal_ch_o   (cal_ch),
    .cal_addr_o (cal_addr),
    .cal_data_o (cal_data),
    .running_o  (running),
    .paused_o   (paused)
  );

  assign status_o = '{running: running, clearing: clearing, fwd: fwd,
                      paused: paused, rx_err: rx_err, cal_busy: cal_busy};

endmodule
