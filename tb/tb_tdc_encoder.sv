// tb_tdc_encoder: drives thermometer patterns straight onto the encoder's
// tap inputs and checks the reported code and its latency: a pattern
// present at capture edge n must be reported after edge n+2 and only once.
// Cases: clean thermometers of all lengths (only lengths up to one clock
// period, 125 stages, are new hits), a bubble inside the run, ones left
// over from an earlier pulse further down the line, a pulse shorter than a
// clock period that has already left tap 0, a full line, and a line that
// stays high (one hit only).
// The 200-stage line and the 400 MHz clock are the platform's; the
// patterns and the 125-stage window follow this design's encoder.
`timescale 1ps/1ps
module tb_tdc_encoder;
  localparam int N = 200;
  localparam int W = 8;
  localparam int T = 2500;
  localparam int WIN = 125;

  logic         clk = 1'b0, rst = 1'b1;
  logic [N-1:0] taps;
  logic         valid;
  logic [W-1:0] code;
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { int code; int at; } exp_t;
  exp_t expq[$];

  task automatic expect_hit(input int c, input int at);
    exp_t e;
    e.code = c;
    e.at   = at;
    expq.push_back(e);
  endtask

  always #(T/2) clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tdc_encoder #(.N_TAPS(N), .CODE_W(W), .WINDOW(WIN)) dut (
    .clk(clk), .rst(rst), .taps_i(taps), .valid_o(valid), .code_o(code));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // monitor: every reported hit must be the next expected one, on time
  always @(negedge clk) begin
    if (!rst && valid) begin
      if (expq.size() == 0) begin
        check(1'b0, $sformatf("unexpected hit code %0d", code));
      end else begin
        exp_t e;
        e = expq.pop_front();
        check(int'(code) == e.code, $sformatf("code %0d expected %0d", code, e.code));
        check(cyc == e.at, $sformatf("latency: hit at cycle %0d expected %0d", cyc, e.at));
      end
    end
  end

  function automatic logic [N-1:0] therm(input int len);
    logic [N-1:0] v = '0;
    for (int i = 0; i < len; i++) v[i] = 1'b1;
    return v;
  endfunction

  // put a pattern on the taps for one capture edge, then saturate, then empty
  task automatic shot(input logic [N-1:0] pat, input int expect_code, input bit new_hit);
    @(negedge clk) taps = pat;
    if (new_hit && expect_code <= WIN) expect_hit(expect_code, cyc + 3);
    @(negedge clk) taps = '1;
    @(negedge clk) taps = '0;
    repeat (2) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] p;
    taps = '0;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    // clean thermometer codes
    for (int len = 1; len <= N; len += 9) shot(therm(len), len, 1'b1);
    shot(therm(N), N, 1'b1);
    // bubbles: a single zero inside the run is counted as a one
    for (int len = 10; len < WIN; len += 23) begin
      p = therm(len);
      p[len/2] = 1'b0;
      shot(p, len, 1'b1);
    end
    // left-over ones of an earlier pulse after a gap of zeros
    for (int len = 5; len < WIN; len += 29) begin
      p = therm(len) | (~therm(len + 3 + len % 5));
      shot(p, len, 1'b1);
    end
    // short pulses: zeros at the start of the line, the edge further on
    for (int len = 8; len <= WIN; len += 13) begin
      p = therm(len) & ~therm(len / 3);
      shot(p, len, 1'b1);
    end
    // tap 0 stays high across two samples: only one hit
    @(negedge clk) taps = therm(40);
    expect_hit(40, cyc + 3);
    @(negedge clk) taps = therm(150);
    @(negedge clk) taps = therm(200);
    @(negedge clk) taps = '0;
    repeat (6) @(negedge clk);
    // random lengths
    for (int i = 0; i < 200; i++) begin
      int len;
      len = 1 + int'($urandom_range(N - 1));
      shot(therm(len), len, 1'b1);
    end
    repeat (6) @(negedge clk);
    check(expq.size() == 0, $sformatf("%0d expected hits never reported", expq.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
