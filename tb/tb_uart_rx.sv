// tb_uart_rx: the testbench serialises bytes (8N1, LSB first) onto the
// receiver's input with a short bit time and checks the bytes it reports,
// one valid pulse per frame, a frame error for a missing stop bit, that a
// short low glitch is not taken as a frame, and tolerance of a bit time a
// few percent off.
// The platform only names the UART; the 8N1 format checked here is this
// design's choice, and the bit time is shortened to 16 clocks for speed.
`timescale 1ps/1ps
module tb_uart_rx;
  localparam int CPB = 16;

  logic       clk = 1'b0, rst = 1'b1;
  logic       rx;
  logic [7:0] data;
  logic       valid, ferr;
  int checks = 0, failures = 0;
  int nvalid = 0, nerr = 0;
  logic [7:0] last;

  always #5000 clk = ~clk;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (
    .clk(clk), .rst(rst), .rx_i(rx), .data_o(data), .valid_o(valid), .frame_err_o(ferr));

  always @(posedge clk) begin
    if (valid) begin
      nvalid++;
      last = data;
    end
    if (ferr) nerr++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // bit time in ps: nominal CPB clock periods, scaled by pct/100
  task automatic send(input logic [7:0] b, input bit stop, input int pct);
    int bt;
    bt = CPB * 10000 * pct / 100;
    rx = 1'b0; #(bt);
    for (int i = 0; i < 8; i++) begin
      rx = b[i]; #(bt);
    end
    rx = stop; #(bt);
    rx = 1'b1; #(bt);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] b;
    int n0;
    rx = 1'b1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (5) @(negedge clk);
    for (int n = 0; n < 60; n++) begin
      b = (n < 2) ? 8'(n * 255) : 8'($urandom);
      n0 = nvalid;
      send(b, 1'b1, (n % 3 == 0) ? 97 : ((n % 3 == 1) ? 103 : 100));
      check(nvalid == n0 + 1, $sformatf("one byte per frame (%0d)", nvalid - n0));
      check(last == b, $sformatf("received %02h expected %02h", last, b));
    end
    // missing stop bit
    n0 = nvalid;
    send(8'hA5, 1'b0, 100);
    #(CPB * 10000 * 2);
    check(nerr == 1, $sformatf("frame error count %0d", nerr));
    check(nvalid == n0, "no byte from a bad frame");
    // glitch shorter than half a bit
    rx = 1'b0; #(CPB * 10000 / 4); rx = 1'b1;
    #(CPB * 10000 * 12);
    check(nvalid == n0 && nerr == 1, "glitch ignored");
    // good byte afterwards
    send(8'h3C, 1'b1, 100);
    check(nvalid == n0 + 1 && last == 8'h3C, "recovers after errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
