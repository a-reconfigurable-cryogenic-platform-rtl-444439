// tb_readout_ctrl: drives command bytes into the controller as the UART
// receiver would and models the other side: a histogram memory with a
// one-cycle read latency, a transmitter that is busy for a random time
// after each byte, and the clock-crossing acknowledges with random delay.
// Checks: 'G'/'H' switch acquisition; 'R' streams every bin MSB first in
// bin order and, when counting, pauses acquisition for the whole readout
// and resumes it afterwards; 'C' runs the four-phase clear handshake; 'W'
// delivers its three bytes as one calibration word; CTS is deasserted
// while a command is being served; unknown bytes change nothing.
// Reading the histogram out to a host follows the platform; the command
// bytes and the models of the neighbouring blocks are this design's own.
`timescale 1ps/1ps
module tb_readout_ctrl;
  localparam int NB = 200;
  localparam int AW = $clog2(NB);

  logic          clk = 1'b0, rst = 1'b1;
  logic [7:0]    rx_data, tx_data;
  logic          rx_valid, tx_valid, tx_ready, cts_n;
  logic          acq_en, creq, cack, rd_en, creq_seen, running, paused;
  logic [AW-1:0] rd_addr;
  logic [15:0]   rd_data;
  logic          cal_req, cal_ack;
  logic [7:0]    cal_ch, cal_addr, cal_data;

  int checks = 0, failures = 0;
  logic [15:0] mem_m [NB];
  logic [7:0]  txq[$];
  int          acq_during_send = 0, pause_count = 0, busy_cnt = 0;

  always #5000 clk = ~clk;

  readout_ctrl #(.N_BINS(NB), .COUNT_W(16), .SETTLE(4)) dut (
    .clk(clk), .rst(rst), .rx_data_i(rx_data), .rx_valid_i(rx_valid),
    .tx_data_o(tx_data), .tx_valid_o(tx_valid), .tx_ready_i(tx_ready),
    .cts_n_o(cts_n), .acq_en_o(acq_en), .clear_req_o(creq), .clear_ack_i(cack),
    .rd_en_o(rd_en), .rd_addr_o(rd_addr), .rd_data_i(rd_data),
    .cal_req_o(cal_req), .cal_ack_i(cal_ack), .cal_ch_o(cal_ch),
    .cal_addr_o(cal_addr), .cal_data_o(cal_data),
    .running_o(running), .paused_o(paused));

  // histogram memory model
  always @(posedge clk) if (rd_en) rd_data <= mem_m[rd_addr];

  // transmitter model: takes a byte when ready, then busy 3..10 cycles
  always @(posedge clk) begin
    if (rst) begin
      tx_ready <= 1'b1;
      busy_cnt <= 0;
    end else if (tx_ready && tx_valid) begin
      txq.push_back(tx_data);
      tx_ready <= 1'b0;
      busy_cnt <= 3 + int'($urandom_range(7));
      if (acq_en) acq_during_send++;
    end else if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) tx_ready <= 1'b1;
    end
    if (paused) pause_count++;
  end

  // acknowledge models: follow the request after 2..5 cycles
  int cdel = 0, wdel = 0;
  always @(posedge clk) begin
    if (rst) begin
      cack <= 1'b0; cal_ack <= 1'b0;
    end else begin
      if (creq != cack) begin
        if (cdel == 0) begin cack <= creq; cdel <= 2 + int'($urandom_range(3)); end
        else cdel <= cdel - 1;
      end
      if (cal_req != cal_ack) begin
        if (wdel == 0) begin cal_ack <= cal_req; wdel <= 2 + int'($urandom_range(3)); end
        else wdel <= wdel - 1;
      end
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic cmd(input logic [7:0] b);
    while (cts_n) @(negedge clk);
    @(negedge clk);
    rx_data = b; rx_valid = 1'b1;
    @(negedge clk);
    rx_valid = 1'b0;
  endtask

  task automatic wait_idle();
    repeat (2) @(negedge clk);
    while (cts_n) @(negedge clk);
  endtask

  task automatic do_read(input string tag);
    txq.delete();
    cmd(8'h52);
    wait_idle();
    check(txq.size() == 2 * NB, $sformatf("%s: %0d bytes sent", tag, txq.size()));
    for (int b = 0; b < NB && txq.size() >= 2; b++) begin
      logic [15:0] w;
      w[15:8] = txq.pop_front();
      w[7:0]  = txq.pop_front();
      check(w == mem_m[b], $sformatf("%s: bin %0d = %04h expected %04h", tag, b, w, mem_m[b]));
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rx_data = '0; rx_valid = 1'b0;
    foreach (mem_m[i]) mem_m[i] = 16'($urandom);
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    check(!acq_en && !running && !cts_n, "idle after reset");

    // readout while halted
    do_read("halted");
    check(acq_during_send == 0 && pause_count == 0, "no pause needed when halted");

    // start, read while running: acquisition paused during the readout
    cmd(8'h47);
    @(negedge clk);
    check(acq_en && running, "G starts acquisition");
    foreach (mem_m[i]) mem_m[i] = 16'($urandom);
    do_read("running");
    check(acq_during_send == 0, $sformatf("acq_en high during %0d sends", acq_during_send));
    check(pause_count == 1, $sformatf("pause count %0d", pause_count));
    @(negedge clk);
    check(acq_en, "acquisition resumed after readout");

    // unknown byte
    cmd(8'h00);
    wait_idle();
    check(acq_en && creq == 1'b0 && cal_req == 1'b0, "unknown byte ignored");

    // clear handshake, acquisition kept running
    cmd(8'h43);
    @(negedge clk);
    check(creq && cts_n, "C raises clear request, CTS off");
    wait_idle();
    check(!creq && !cack, "clear handshake completed");
    check(acq_en, "acquisition still running after clear");

    // halt
    cmd(8'h48);
    @(negedge clk);
    check(!acq_en && !running, "H stops acquisition");

    // calibration words
    for (int n = 0; n < 20; n++) begin
      logic [7:0] c, a, d;
      c = 8'($urandom_range(5)); a = 8'($urandom); d = 8'($urandom);
      cmd(8'h57); cmd(c); cmd(a);
      cmd(d);
      while (!cal_req) @(negedge clk);
      check(cal_ch == c && cal_addr == a && cal_data == d,
            $sformatf("cal word %0d/%02h/%02h got %0d/%02h/%02h", c, a, d, cal_ch, cal_addr, cal_data));
      check(cts_n, "CTS off during calibration write");
      wait_idle();
      check(!cal_req && !cal_ack, "calibration handshake completed");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
