// tb_uart_tx: sends bytes through the transmitter with a short bit time and
// decodes the line in the testbench by sampling each bit in its middle.
// Checks every data byte, the start and stop bits, the idle level, and
// that ready stays low for exactly one frame (10 bit times).
// The platform only names the UART; the 8N1 format checked here is this
// design's choice, and the bit time is shortened to 16 clocks for speed.
`timescale 1ps/1ps
module tb_uart_tx;
  localparam int CPB = 16;

  logic       clk = 1'b0, rst = 1'b1;
  logic [7:0] data;
  logic       valid, ready, tx;
  int checks = 0, failures = 0;

  always #5000 clk = ~clk;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (
    .clk(clk), .rst(rst), .data_i(data), .valid_i(valid), .ready_o(ready), .tx_o(tx));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] b, got;
    int busy;
    valid = 1'b0; data = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    check(tx == 1'b1 && ready == 1'b1, "idle line high and ready");
    for (int n = 0; n < 40; n++) begin
      b = (n < 4) ? 8'(n * 85) : 8'($urandom);
      @(negedge clk);
      data = b; valid = 1'b1;
      @(negedge clk);
      valid = 1'b0; data = ~b;
      check(!ready, "busy after accept");
      // find start bit
      while (tx) @(negedge clk);
      repeat (CPB / 2) @(negedge clk);
      check(tx == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(negedge clk);
        got[i] = tx;
      end
      check(got == b, $sformatf("byte %02h sent as %02h", b, got));
      repeat (CPB) @(negedge clk);
      check(tx == 1'b1, "stop bit");
      busy = 0;
      while (!ready) begin
        @(negedge clk);
        busy++;
      end
      check(busy >= CPB / 2 - 2 && busy <= CPB / 2 + 2,
            $sformatf("ready %0d cycles after mid stop bit", busy));
      if (n % 3 == 0) repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
