// tb_tdc_density: the code-density test of the TDC, run on the whole
// platform at its default sizes. Hits arrive at random times, uncorrelated
// with the 400 MHz clock, so every delay stage should collect hits in
// proportion to its width; with the uniform stages of the delay-line model
// every bin of one clock period (codes 1..125) gets about the same count.
// The testbench works out each hit's code independently (a hit r ps
// before a clock edge has passed floor(r/20) stages; one that has passed
// none is seen a period later with code 125), keeps a reference
// histogram, then plays the host: 'C', 'G', the hits, 'H', 'R', and
// compares all 200 bins read back over the UART. Also checked: the total
// count, that bins beyond one period stay empty, and that every bin of
// the period was hit.
// The density test itself and the 200 x 16-bit histogram follow the
// platform (which used 30 million hits in 400 runs); the hit count here is
// smaller to keep the simulation short, and the command bytes are this
// design's own.
`timescale 1ps/1ps
module tb_tdc_density;
  import cryo_pkg::*;

  localparam int BIT_PS = UART_CLKS_PER_BIT * 10000;
  localparam int TDC_PS = 2500;
  localparam int EDGE0  = 300 + 1250;     // first rising edge of clk_tdc
  localparam int N_HITS = 12000;

  int checks = 0, failures = 0;
  int ref_h [HIST_BINS];
  logic [7:0] rxq[$];

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
      rxq.push_back(b);
    end
  end

  task automatic wait_ready();
    #(4 * BIT_PS);
    while (cts_n) @(negedge clk_sys);
  endtask

  // ---- one hit at a random phase -------------------------------------------------
  // The rising edge comes r ps before a clock edge, r in 1..2499 and never a
  // multiple of 20 (so no tap changes exactly at the clock edge).
  task automatic random_hit();
    longint now, e;
    int r, m;
    r = 0;
    while (r % 20 == 0) r = int'($urandom_range(2499, 1));
    now = $time;
    e   = EDGE0 + ((now + 3000 - EDGE0 + TDC_PS - 1) / TDC_PS) * TDC_PS;
    #(e - r - now);
    hit = 1'b1;
    #1500;
    hit = 1'b0;
    #(3000 + $urandom_range(4000));
    m = r / 20;
    if (m == 0) m = TDC_PS / 20;          // seen one period later
    ref_h[m-1]++;
  endtask

  initial begin : watchdog
    #(64'd200_000_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total, mn, mx, w;
    foreach (ref_h[i]) ref_h[i] = 0;
    #100_000;
    rst_n = 1'b1;
    #1000;
    while (status.cal_busy) @(negedge clk_tdc);

    send_byte(8'h43);                      // 'C'
    send_byte(8'h47);                      // 'G'
    wait_ready();
    for (int i = 0; i < N_HITS; i++) random_hit();
    #20_000;
    send_byte(8'h48);                      // 'H'
    wait_ready();

    rxq.delete();
    send_byte(8'h52);                      // 'R'
    #(BIT_PS);
    while (cts_n) @(negedge clk_sys);
    #(12 * BIT_PS);
    check(rxq.size() == 2 * HIST_BINS, $sformatf("%0d bytes read back", rxq.size()));

    total = 0; mn = 1 << 30; mx = 0;
    for (int b = 0; b < HIST_BINS && rxq.size() >= 2; b++) begin
      w = int'(rxq.pop_front()) << 8;
      w = w | int'(rxq.pop_front());
      check(w == ref_h[b], $sformatf("bin %0d = %0d expected %0d", b, w, ref_h[b]));
      total += w;
      if (b < TDC_WINDOW) begin
        if (w < mn) mn = w;
        if (w > mx) mx = w;
        check(w > 0, $sformatf("bin %0d of the period never hit", b));
      end else begin
        check(w == 0, $sformatf("bin %0d beyond one period holds %0d", b, w));
      end
    end
    check(total == N_HITS, $sformatf("histogram total %0d of %0d hits", total, N_HITS));
    $display("density test: %0d hits, bins 1..%0d hold %0d..%0d (mean %0d)",
             total, TDC_WINDOW, mn, mx, N_HITS / TDC_WINDOW);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
