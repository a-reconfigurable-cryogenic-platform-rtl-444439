// adc_merge: converts the TDC time stamps of the phase-interleaved
// single-slope ADC channels into calibrated samples and merges them into
// one ordered sample stream.
//
// Principle: each channel has its own RC ramp, made by driving one phase
// of the 200 MHz ramp clock through a resistor into an LVDS input, and the
// LVDS receiver compares the ramp with the analog input. The comparator
// rises when the rising ramp crosses the input, so the crossing time
// within the ramp period measures the input voltage. With NCH = 6 ramps
// shifted by 1/6 of a period, the channels together give 6 x 200 MSa/s =
// 1.2 GSa/s. The comparators feed ordinary TDC channels (carry chain +
// tdc_encoder) running at 400 MHz, which is CPR = 2 sampling cycles per
// ramp period.
//
// How it works:
//   1. Time stamp. A code seen while cyc_q = p was captured at a clock
//      edge whose position in the ramp period is p (the encoder's two-cycle latency is
//      a whole number of periods for CPR = 2), so the crossing lies
//      ts = (p ? p : CPR) * FINE - code fine steps after the period start
//      (FINE = 125 steps of 20 ps per 2.5 ns cycle).
//   2. Ramp-relative time. Channel k's ramp starts OFF_k = k*CPR*FINE/NCH
//      steps into the period; ts_rel = ts - OFF_k modulo the period. A
//      stamp below OFF_k came from the ramp that started in the previous
//      period (it wrapped round) and is filed with the previous frame.
//   3. Calibration. ts_rel addresses a per-channel look-up table that
//      holds the sample value (one block RAM of 2^TS_W words per channel),
//      which corrects the curvature of the RC ramp and the channel's
//      offset and gain. After reset the table is swept to the identity
//      (sample = ts_rel); the host loads measured tables through the
//      cal_* port, one word per four-phase handshake: cal_ch_i, cal_addr_i
//      and cal_data_i are held while cal_req_i (synchronised into clk) is
//      high, the word is written on the rising edge of cal_req_i, and
//      cal_ack_o follows cal_req_i one cycle later. cal_busy_o is high
//      during the sweep; a request is then served after the sweep.
//   4. Merging. Samples are collected in two frame buffers; every ramp
//      period the older buffer is issued: frame_o pulses for one cycle and
//      smp_o[k] / smp_valid_o[k] hold channel k's sample, k = 0 being the
//      earliest in time. A channel that saw no crossing (input outside the
//      ramp range) has its valid bit low.
// Timing: one frame every CPR cycles; a crossing appears in the frame
// issued 3 to 5 cycles after the encoder reports it.
//
// The RC-ramp principle, the 6 phases of a 200 MHz clock, the 1.2 GSa/s
// rate and the existence of a calibration follow the platform. The phase
// offsets, the time-stamp arithmetic, the table-based calibration and the
// frame format are this design's choices.
`timescale 1ps/1ps
module adc_merge
  import cryo_pkg::*;
#(
  parameter int NCH      = ADC_CH,
  parameter int CODE_W   = TDC_CODE_W,
  parameter int TS_W     = ADC_TS_W,
  parameter int SAMPLE_W = ADC_SAMPLE_W,
  parameter int CPR      = TDC_PER_RAMP,
  parameter int FINE     = 125,           // fine steps per sampling cycle
  localparam int CH_W    = $clog2(NCH)
) (
  input  logic                clk,
  input  logic                rst,
  // one TDC channel per ramp phase
  input  logic [NCH-1:0]      ch_valid_i,
  input  logic [CODE_W-1:0]   ch_code_i [NCH],
  // calibration table write port
  input  logic                cal_req_i,
  output logic                cal_ack_o,
  input  logic [CH_W-1:0]     cal_ch_i,
  input  logic [TS_W-1:0]     cal_addr_i,
  input  logic [SAMPLE_W-1:0] cal_data_i,
  output logic                cal_busy_o,
  // merged output
  output logic                frame_o,
  output logic [NCH-1:0]      smp_valid_o,
  output logic [SAMPLE_W-1:0] smp_o [NCH]
);

  localparam int PERIOD = CPR * FINE;
  localparam int CYC_W  = (CPR > 1) ? $clog2(CPR) : 1;

  // position of the current cycle in the ramp period
  logic [CYC_W-1:0] cyc_q, cyc_d1;

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc_q  <= '0;
      cyc_d1 <= CYC_W'(CPR - 1);
    end else begin
      cyc_q  <= (32'(cyc_q) == CPR - 1) ? '0 : cyc_q + CYC_W'(1);
      cyc_d1 <= cyc_q;
    end
  end

  // ---- calibration table: reset sweep and host writes --------------------------
  logic cal_we;

  assign cal_we = cal_req_i && !cal_ack_o && !cal_busy_o;

  always_ff @(posedge clk) begin
    if (rst)              cal_ack_o <= 1'b0;
    else if (!cal_busy_o) cal_ack_o <= cal_req_i;
  end

  logic [TS_W-1:0] sweep_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      cal_busy_o <= 1'b1;
      sweep_q    <= '0;
    end else if (cal_busy_o) begin
      sweep_q <= sweep_q + TS_W'(1);
      if (sweep_q == '1) cal_busy_o <= 1'b0;
    end
  end

  // ---- stages 1-3 per channel: time stamp, wrap, table look-up ------------------
  logic [NCH-1:0]      s2_v, s2_wrap;
  logic [SAMPLE_W-1:0] s2_smp [NCH];

  for (genvar k = 0; k < NCH; k++) begin : g_ch
    localparam int OFF = k * PERIOD / NCH;

    logic [SAMPLE_W-1:0] lut [2**TS_W];
    int                  ts, rel;
    logic [TS_W-1:0]     rel_addr;
    logic                wrap;

    always_comb begin
      ts       = ((32'(cyc_q) == 0) ? CPR : 32'(cyc_q)) * FINE - 32'(ch_code_i[k]);
      wrap     = (ts < OFF);
      rel      = wrap ? ts + PERIOD - OFF : ts - OFF;
      rel_addr = (rel > 2**TS_W - 1) ? '1 : TS_W'(rel);
    end

    always_ff @(posedge clk) begin
      if (cal_busy_o) begin
        lut[sweep_q] <= SAMPLE_W'(sweep_q);
      end else if (cal_we && 32'(cal_ch_i) == k) begin
        lut[cal_addr_i] <= cal_data_i;
      end
      s2_smp[k] <= lut[rel_addr];
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        s2_v[k]    <= 1'b0;
        s2_wrap[k] <= 1'b0;
      end else begin
        s2_v[k]    <= ch_valid_i[k] && !cal_busy_o && (ts >= 0) && (ts < PERIOD);
        s2_wrap[k] <= wrap;
      end
    end
  end

  // ---- frame buffers -----------------------------------------------------------
  logic [NCH-1:0]      cur_v_q, prev_v_q, cur_v_n, prev_v_n;
  logic [SAMPLE_W-1:0] cur_q [NCH];
  logic [SAMPLE_W-1:0] prev_q [NCH];
  logic [SAMPLE_W-1:0] cur_n [NCH];
  logic [SAMPLE_W-1:0] prev_n [NCH];
  logic                period_end;

  // s2 results belong to the cycle before: cyc_d1 is their position.
  assign period_end = (32'(cyc_d1) == 0);

  always_comb begin
    cur_v_n  = cur_v_q;
    prev_v_n = prev_v_q;
    cur_n    = cur_q;
    prev_n   = prev_q;
    for (int k = 0; k < NCH; k++) begin
      if (s2_v[k] && s2_wrap[k]) begin
        prev_v_n[k] = 1'b1;
        prev_n[k]   = s2_smp[k];
      end else if (s2_v[k]) begin
        cur_v_n[k] = 1'b1;
        cur_n[k]   = s2_smp[k];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cur_v_q     <= '0;
      prev_v_q    <= '0;
      frame_o     <= 1'b0;
      smp_valid_o <= '0;
    end else begin
      frame_o <= period_end;
      if (period_end) begin
        smp_valid_o <= prev_v_n;
        prev_v_q    <= cur_v_n;
        cur_v_q     <= '0;
      end else begin
        prev_v_q <= prev_v_n;
        cur_v_q  <= cur_v_n;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (period_end) begin
      smp_o  <= prev_n;
      prev_q <= cur_n;
    end else begin
      prev_q <= prev_n;
      cur_q  <= cur_n;
    end
  end

endmodule
