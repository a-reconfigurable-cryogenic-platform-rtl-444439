// tb_cryo_tdc_top: end-to-end test of the whole platform at its default
// sizes (200-stage chains, 200 x 16-bit histogram, 115.2 kBd UART, six ADC
// channels). The testbench plays the host on the UART and the analog world
// on the hit pins:
//   * TDC: hit edges are placed at chosen distances before a 400 MHz edge,
//     so the code each must produce is known (distance / 20 ps); a
//     reference histogram is kept and compared with the bytes read back.
//   * ADC: the six comparator outputs are driven as six ramps crossing a
//     slowly varying input: for period n and channel k the crossing comes x
//     fine steps after that channel's ramp start. Every merged frame must
//     hold x (identity table) or the loaded table value, in period order.
// Sequence: reset and table sweep; ADC burst; 'C', 'G', TDC hits; 'R' while
// running (pause, full readout, resume); 'H', 'C', 'G', a few hits, 'H',
// 'R'; 'W' calibration words; second ADC burst with one missing crossing.
// A 400 MHz pulse train puts hits in one bin on consecutive clocks.
// Each mechanism (clear, pause, calibration write, forwarding, flow control, wrapped
// ADC crossing, missing crossing, 1.2 GSa/s frame rate) is counted and a
// failure is counted for one that never happened.
// The sizes (200 stages, 200 x 16-bit bins, 400/100 MHz clocks, six
// phases) are the platform's; the host command sequence, the 115.2 kBd
// rate and the input patterns are this design's own choices.
`timescale 1ps/1ps
module tb_cryo_tdc_top;
  import cryo_pkg::*;

  localparam int BIT_PS  = UART_CLKS_PER_BIT * 10000;
  localparam int TDC_PS  = 2500;
  localparam int EDGE0   = 300 + 1250;     // first rising edge of clk_tdc
  localparam int PER     = 250;            // fine steps per ramp period

  logic clk_sys = 1'b0, clk_tdc = 1'b0, rst_n = 1'b0;
  logic hit = 1'b0, urx = 1'b1, utx, cts_n;
  logic [ADC_CH-1:0]       adc_hit = '0;
  logic                    adc_frame;
  logic [ADC_CH-1:0]       adc_valid;
  logic [ADC_SAMPLE_W-1:0] adc_sample [ADC_CH];
  status_t                 status;

  initial forever #5000 clk_sys = ~clk_sys;
  initial begin
    #300;
    forever #1250 clk_tdc = ~clk_tdc;
  end

  cryo_tdc_top dut (
    .clk_sys_i(clk_sys), .clk_tdc_i(clk_tdc), .rst_ni(rst_n), .hit_i(hit),
    .uart_rx_i(urx), .uart_tx_o(utx), .uart_cts_n_o(cts_n),
    .adc_hit_i(adc_hit), .adc_frame_o(adc_frame), .adc_valid_o(adc_valid),
    .adc_sample_o(adc_sample), .status_o(status));

  int checks = 0, failures = 0;
  int ref_h [HIST_BINS];
  int lut_m [ADC_CH][256];
  logic [7:0] rxq[$];
  int n_pause = 0, n_clear = 0, n_cal = 0, n_cts = 0, n_wrap = 0, n_miss = 0;
  int n_frames = 0, n_frame_gap_bad = 0;
  longint last_frame_t = 0;
  longint t_cycle0 = -1;        // time of clk_tdc cycle 0 of the ADC merger

  typedef struct { int x [ADC_CH]; } frame_t;
  frame_t expf[$];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---- host UART ---------------------------------------------------------------
  task automatic send_byte(input logic [7:0] b);
    while (cts_n) @(negedge clk_sys);
    urx = 1'b0; #(BIT_PS);
    for (int i = 0; i < 8; i++) begin
      urx = b[i]; #(BIT_PS);
    end
    urx = 1'b1; #(BIT_PS);
  endtask

  initial begin : host_rx
    logic [7:0] b;
    forever begin
      @(negedge utx);
      #(BIT_PS / 2);
      for (int i = 0; i < 8; i++) begin
        #(BIT_PS);
        b[i] = utx;
      end
      #(BIT_PS);
      check(utx == 1'b1, "stop bit from the platform");
      rxq.push_back(b);
    end
  end

  task automatic wait_ready();
    #(4 * BIT_PS);
    while (cts_n) @(negedge clk_sys);
  endtask

  task automatic read_hist(input string tag);
    rxq.delete();
    send_byte(8'h52);
    #(BIT_PS);
    while (cts_n) @(negedge clk_sys);
    #(12 * BIT_PS);                 // last frame still on the line
    check(rxq.size() == 2 * HIST_BINS, $sformatf("%s: %0d bytes", tag, rxq.size()));
    for (int b = 0; b < HIST_BINS && rxq.size() >= 2; b++) begin
      int w;
      w = int'(rxq.pop_front()) << 8;
      w = w | int'(rxq.pop_front());
      check(w == ref_h[b], $sformatf("%s: bin %0d = %0d expected %0d", tag, b, w, ref_h[b]));
    end
  endtask

  // ---- TDC hits ---------------------------------------------------------------
  // one hit whose edge enters the chain (20*m + 10) ps before a clock edge:
  // it has passed m stages at that edge, so its code is m, bin m-1
  task automatic tdc_hit(input int m);
    longint now, e, t;
    now = $time;
    e   = EDGE0 + ((now + 3000 - EDGE0 + TDC_PS - 1) / TDC_PS) * TDC_PS;
    t   = e - (20 * m + 10);
    #(t - now);
    hit = 1'b1;
    #1500;
    hit = 1'b0;
    #5000;
    ref_h[m-1]++;
  endtask

  // n hits on consecutive clock edges, all with code m (a 400 MHz pulse
  // train of 1 ns pulses): back-to-back increments of one bin
  task automatic tdc_train(input int m, input int n);
    longint now, e, t;
    now = $time;
    e   = EDGE0 + ((now + 3000 - EDGE0 + TDC_PS - 1) / TDC_PS) * TDC_PS;
    t   = e - (20 * m + 10);
    #(t - now);
    for (int i = 0; i < n; i++) begin
      hit = 1'b1;
      #1000;
      hit = 1'b0;
      #(TDC_PS - 1000);
      ref_h[m-1]++;
    end
    #5000;
  endtask

  // ---- ADC ramps -----------------------------------------------------------------
  // crossings of period n: channel k at x fine steps after its ramp start
  task automatic adc_burst(input int n_first, input int n_periods, input int skip_n, input int skip_k);
    longint t_start;
    for (int n = n_first; n < n_first + n_periods; n++) begin
      frame_t f;
      for (int k = 0; k < ADC_CH; k++) begin
        int p;
        p = (n * 6 + k * 5) % 180;
        f.x[k] = 20 + ((p < 90) ? p : 180 - p);        // triangle, 20..110
        if (n == skip_n && k == skip_k) f.x[k] = -1;
        else if (k * PER / ADC_CH + f.x[k] >= PER) n_wrap++;
        if (f.x[k] < 0) n_miss++;
      end
      expf.push_back(f);
      for (int k = 0; k < ADC_CH; k++) begin
        if (f.x[k] >= 0) begin
          automatic int kk = k;
          automatic longint tr = t_cycle0 +
              longint'(n * PER + kk * PER / ADC_CH + f.x[kk]) * 20 - 10;
          fork
            begin
              #(tr - $time);
              adc_hit[kk] = 1'b1;
              #1200;
              adc_hit[kk] = 1'b0;
            end
          join_none
        end
      end
    end
    // let the last crossings happen
    t_start = t_cycle0 + longint'((n_first + n_periods + 4) * PER) * 20;
    #(t_start - $time);
  endtask

  // merged frames: compare in period order
  always @(negedge clk_tdc) begin
    if (adc_frame && rst_n) begin   // outputs are undefined before reset reaches the logic
      if (last_frame_t != 0 && ($time - last_frame_t) != 2 * TDC_PS) begin
        n_frame_gap_bad++;
        $display("frame gap %0d ps at %0t", $time - last_frame_t, $time);
      end
      last_frame_t = $time;
      if (adc_valid != '0) begin
        if (expf.size() == 0) begin
          check(1'b0, "ADC frame with no crossings sent");
        end else begin
          frame_t f;
          f = expf.pop_front();
          n_frames++;
          for (int k = 0; k < ADC_CH; k++) begin
            check(adc_valid[k] == (f.x[k] >= 0), $sformatf("ADC ch %0d valid", k));
            if (f.x[k] >= 0)
              check(int'(adc_sample[k]) == lut_m[k][f.x[k]],
                    $sformatf("ADC ch %0d sample %0d expected %0d", k, adc_sample[k], lut_m[k][f.x[k]]));
          end
        end
      end
    end
  end

  // ADC merger cycle 0 = last clk_tdc edge with its reset high. The merger
  // issues its first frame two cycles later; it is seen at the falling edge
  // after that, 2.5 cycles = 6250 ps after cycle 0.
  always @(negedge clk_tdc) if (adc_frame && rst_n && t_cycle0 < 0) t_cycle0 = $time - 6250;

  // mechanism counters
  logic clearing_d = 1'b0, cts_d = 1'b0, armed = 1'b0;  // armed: after the reset sweeps
  int n_fwd = 0;
  always @(posedge clk_sys) begin
    if (status.paused) n_pause++;
    if (cts_n && !cts_d) n_cts++;
    cts_d <= cts_n;
  end
  always @(posedge clk_tdc) begin
    if (status.clearing && !clearing_d && armed) n_clear++;
    if (status.fwd) n_fwd++;
    clearing_d <= status.clearing;
  end

  initial begin : watchdog
    #(64'd400_000_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nper;
    foreach (ref_h[i]) ref_h[i] = 0;
    for (int k = 0; k < ADC_CH; k++) for (int a = 0; a < 256; a++) lut_m[k][a] = a;
    #100_000;
    rst_n = 1'b1;
    #1000;
    while (status.cal_busy) @(negedge clk_tdc);
    armed = 1'b1;

    // ADC burst with identity tables
    nper = int'(($time - t_cycle0) / (PER * 20)) + 4;
    adc_burst(nper, 400, -1, -1);

    // histogram: clear, run, hits, read while running
    send_byte(8'h43);
    send_byte(8'h47);
    wait_ready();
    check(status.running, "acquisition running after G");
    for (int i = 0; i < 3000; i++) begin
      int m;
      m = (i % 5 == 0) ? 60 : 1 + int'($urandom_range(123));
      tdc_hit(m);
    end
    tdc_train(37, 16);              // same bin on 16 consecutive clocks
    tdc_train(90, 9);
    #20_000;
    read_hist("read while running");
    check(status.running, "acquisition resumed after readout");

    // halt, clear, short run, read
    send_byte(8'h48);
    send_byte(8'h43);
    foreach (ref_h[i]) ref_h[i] = 0;
    send_byte(8'h47);
    wait_ready();
    for (int i = 0; i < 300; i++) tdc_hit(1 + (i % 4) * 40);
    #20_000;
    send_byte(8'h48);
    for (int i = 0; i < 20; i++) begin
      hit = 1'b1; #1500; hit = 1'b0; #8000;        // ignored while halted
    end
    wait_ready();
    read_hist("read after clear");

    // calibration of channel 3, addresses 20..39
    for (int a = 20; a < 40; a++) begin
      send_byte(8'h57); send_byte(8'd3); send_byte(8'(a)); send_byte(8'(255 - a));
      lut_m[3][a] = 255 - a;
      n_cal++;
    end
    wait_ready();

    // second ADC burst, one missing crossing
    nper = int'(($time - t_cycle0) / (PER * 20)) + 4;
    adc_burst(nper, 400, nper + 17, 1);
    #50_000;
    check(expf.size() == 0, $sformatf("%0d ADC frames never issued", expf.size()));

    // mechanisms
    check(n_clear >= 2, $sformatf("clear sweeps %0d", n_clear));
    check(n_pause >= 1, $sformatf("readout pauses %0d", n_pause));
    check(n_cal == 20, "calibration writes");
    check(n_fwd > 0, $sformatf("forwarded histogram increments %0d", n_fwd));
    check(n_cts >= 4, $sformatf("CTS deasserted %0d times", n_cts));
    check(n_wrap > 0, $sformatf("wrapped ADC crossings %0d", n_wrap));
    check(n_miss == 1, "one missing ADC crossing");
    check(n_frames == 800, $sformatf("%0d ADC frames checked", n_frames));
    check(n_frame_gap_bad == 0, $sformatf("%0d ADC frames off the 5 ns grid", n_frame_gap_bad));
    $display("mechanisms: clear=%0d pause=%0d cal=%0d fwd=%0d cts=%0d wrap=%0d miss=%0d frames=%0d",
             n_clear, n_pause, n_cal, n_fwd, n_cts, n_wrap, n_miss, n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
