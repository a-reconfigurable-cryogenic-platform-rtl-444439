// tb_tdc_histogrammer: feeds time codes into the histogrammer at up to one
// per 400 MHz cycle, keeps a reference histogram, and compares every bin
// through the 100 MHz read port. Covers: the reset-time clear sweep, hits
// in consecutive cycles to the same bin (forwarding), codes outside 1..200
// (dropped), hits while acquisition is disabled (ignored), the four-phase
// clear handshake, and counter saturation (in a second instance with
// 4-bit counters).
// The 200 bins of 16 bits are the platform's; the stimulus, the small
// saturation instance and the handshake timing are this testbench's own.
`timescale 1ps/1ps
module tb_tdc_histogrammer;
  localparam int NB = 200;
  localparam int CW = 16;
  localparam int AW = $clog2(NB);

  logic clk_tdc = 1'b0, clk_sys = 1'b0, rst = 1'b1;
  always #1250 clk_tdc = ~clk_tdc;
  always #5000 clk_sys = ~clk_sys;

  logic          acq_en, hv, creq, cack, clearing, fwd, rd_en;
  logic [7:0]    code;
  logic [AW-1:0] rd_addr;
  logic [CW-1:0] rd_data;
  // small-counter instance for saturation
  logic          s_cack, s_clearing, s_fwd;
  logic [3:0]    s_rd_data;

  int checks = 0, failures = 0, fwd_count = 0;
  int ref_h [NB];

  tdc_histogrammer #(.N_BINS(NB), .COUNT_W(CW), .CODE_W(8)) dut (
    .clk_tdc(clk_tdc), .rst_tdc(rst), .acq_en_i(acq_en), .hit_valid_i(hv),
    .hit_code_i(code), .clear_req_i(creq), .clear_ack_o(cack),
    .clearing_o(clearing), .fwd_o(fwd), .clk_sys(clk_sys), .rd_en_i(rd_en),
    .rd_addr_i(rd_addr), .rd_data_o(rd_data));

  tdc_histogrammer #(.N_BINS(NB), .COUNT_W(4), .CODE_W(8)) dut_sat (
    .clk_tdc(clk_tdc), .rst_tdc(rst), .acq_en_i(acq_en), .hit_valid_i(hv),
    .hit_code_i(code), .clear_req_i(1'b0), .clear_ack_o(s_cack),
    .clearing_o(s_clearing), .fwd_o(s_fwd), .clk_sys(clk_sys), .rd_en_i(rd_en),
    .rd_addr_i(rd_addr), .rd_data_o(s_rd_data));

  always @(posedge clk_tdc) if (fwd) fwd_count++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic hit(input int c, input bit en);
    @(negedge clk_tdc);
    acq_en = en;
    hv     = 1'b1;
    code   = 8'(c);
    if (en && c >= 1 && c <= NB) ref_h[c-1]++;
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(negedge clk_tdc);
      hv = 1'b0;
    end
  endtask

  task automatic read_all(input string tag, input bit check_sat);
    for (int b = 0; b < NB; b++) begin
      @(negedge clk_sys);
      rd_en   = 1'b1;
      rd_addr = AW'(b);
      @(negedge clk_sys);
      rd_en = 1'b0;
      check(int'(rd_data) == ref_h[b],
            $sformatf("%s bin %0d = %0d expected %0d", tag, b, rd_data, ref_h[b]));
      if (check_sat)
        check(int'(s_rd_data) == ((ref_h[b] > 15) ? 15 : ref_h[b]),
              $sformatf("%s saturating bin %0d = %0d (ref %0d)", tag, b, s_rd_data, ref_h[b]));
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk_tdc);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    acq_en = 1'b0; hv = 1'b0; code = '0; creq = 1'b0; rd_en = 1'b0; rd_addr = '0;
    foreach (ref_h[i]) ref_h[i] = 0;
    repeat (4) @(negedge clk_tdc);
    rst = 1'b0;
    // reset sweep: N_BINS cycles of clearing, hits ignored
    t0 = 0;
    while (clearing) begin
      @(negedge clk_tdc);
      t0++;
    end
    check(t0 >= NB - 2 && t0 <= NB + 1, $sformatf("reset sweep took %0d cycles", t0));
    read_all("after reset", 1'b1);

    // random codes, back-to-back, with repeated bins and out-of-range codes
    for (int i = 0; i < 6000; i++) begin
      int r, c;
      r = int'($urandom_range(99));
      if (r < 30)      c = 17;                              // hot bin: forwarding
      else if (r < 35) c = (r < 33) ? 0 : NB + 1 + r;       // dropped
      else             c = 1 + int'($urandom_range(NB - 1));
      hit(c, r != 99);
      if (r > 90) idle(1 + r % 3);
    end
    // a burst into one bin and into the last bin
    for (int i = 0; i < 20; i++) hit(NB, 1'b1);
    idle(5);
    check(fwd_count > 0, $sformatf("forwarding used %0d times", fwd_count));
    read_all("after random hits", 1'b1);

    // clear handshake
    @(negedge clk_sys) creq = 1'b1;
    t0 = 0;
    while (!cack) begin
      @(negedge clk_sys);
      t0++;
    end
    check(!clearing, "ack only after the sweep");
    check(t0 >= NB / 4, $sformatf("clear ack after %0d sys cycles", t0));
    @(negedge clk_sys) creq = 1'b0;
    while (cack) @(negedge clk_sys);
    foreach (ref_h[i]) ref_h[i] = 0;
    read_all("after clear", 1'b0);

    // counting resumes after the clear
    for (int i = 0; i < 300; i++) hit(1 + (i % 7) * 28, 1'b1);
    idle(4);
    read_all("after restart", 1'b0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
