// tb_adc_merge: checks the interleaved-ADC merger with a reference model
// of the ramps and the TDC. For each ramp period n and channel k the
// testbench picks a crossing x (fine steps after that channel's ramp
// start OFF_k = k*250/6), works out the absolute crossing time, the
// sampling edge that captures it, the TDC code (fine steps before that
// edge) and the cycle in which a TDC channel reports it (two cycles after
// the capture edge), and drives exactly that. With the identity table the
// merged frame n must hold x for every channel, k = 0 first; late-phase
// channels whose crossing falls into the next period must still land in
// frame n. Also checked: one frame every 2 cycles (6 samples per 5 ns =
// 1.2 GSa/s), a missing crossing gives a cleared valid bit, the reset-time
// table sweep, and a table loaded over the handshake port.
// The six phases, 200 MHz ramps and 1.2 GSa/s rate come from the platform;
// the crossing pattern, the reference arithmetic and the table contents
// are this testbench's own choices.
`timescale 1ps/1ps
module tb_adc_merge;
  localparam int NCH = 6;
  localparam int FINE = 125;
  localparam int PER = 250;
  localparam int NF = 60;          // frames per phase
  localparam int P0 = 150;         // first period used (after the sweep)
  localparam int MAXC = 2 * (P0 + 2 * NF) + 4000;

  logic             clk = 1'b0, rst = 1'b1;
  logic [NCH-1:0]   ch_v;
  logic [7:0]       ch_code [NCH];
  logic             cal_req, cal_ack, cal_busy, frame;
  logic [2:0]       cal_ch;
  logic [7:0]       cal_addr, cal_data;
  logic [NCH-1:0]   smp_v;
  logic [7:0]       smp [NCH];

  int checks = 0, failures = 0;
  int j = 0;                         // cycle index, 0 = last reset cycle
  bit sch_v [MAXC][NCH];
  int sch_code [MAXC][NCH];
  int exp_x [2*NF][NCH];             // expected x per frame (-1 = none)
  int lut_m [NCH][256];              // expected table contents
  int frames_seen = 0, last_frame_j = -1, nonempty = 0, wraps = 0;

  always #1250 clk = ~clk;

  adc_merge #(.NCH(NCH), .CODE_W(8), .TS_W(8), .SAMPLE_W(8), .CPR(2), .FINE(FINE)) dut (
    .clk(clk), .rst(rst), .ch_valid_i(ch_v), .ch_code_i(ch_code),
    .cal_req_i(cal_req), .cal_ack_o(cal_ack), .cal_ch_i(cal_ch),
    .cal_addr_i(cal_addr), .cal_data_i(cal_data), .cal_busy_o(cal_busy),
    .frame_o(frame), .smp_valid_o(smp_v), .smp_o(smp));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // schedule the TDC report of one crossing
  task automatic crossing(input int n, input int k, input int x, input int idx);
    int t, c;
    t = (P0 + n) * PER + k * PER / NCH + x;   // fine steps since cycle 0
    c = t / FINE + 1;                          // capturing edge
    sch_v[c + 2][k]    = 1'b1;
    sch_code[c + 2][k] = c * FINE - t;
    if (k * PER / NCH + x >= PER) wraps++;
    exp_x[idx][k] = x;
  endtask

  // drive the schedule, cycle by cycle
  always @(negedge clk) begin
    if (!rst) begin
      for (int k = 0; k < NCH; k++) begin
        ch_v[k]    = (j < MAXC) ? sch_v[j][k] : 1'b0;
        ch_code[k] = (j < MAXC) ? 8'(sch_code[j][k]) : 8'd0;
      end
    end
  end
  always @(posedge clk) if (!rst) j <= j + 1;

  // collect frames
  always @(negedge clk) begin
    if (!rst && frame) begin
      if (last_frame_j >= 0)
        check(j - last_frame_j == 2, $sformatf("frame spacing %0d cycles", j - last_frame_j));
      last_frame_j = j;
      if (smp_v != '0) begin
        if (nonempty < 2 * NF) begin
          for (int k = 0; k < NCH; k++) begin
            int e;
            e = exp_x[nonempty][k];
            check(smp_v[k] == (e >= 0), $sformatf("frame %0d ch %0d valid %0b", nonempty, k, smp_v[k]));
            if (e >= 0)
              check(int'(smp[k]) == lut_m[k][e],
                    $sformatf("frame %0d ch %0d sample %0d expected %0d", nonempty, k, smp[k], lut_m[k][e]));
          end
        end
        nonempty++;
      end
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy;
    ch_v = '0; cal_req = 1'b0; cal_ch = '0; cal_addr = '0; cal_data = '0;
    foreach (ch_code[k]) ch_code[k] = '0;
    for (int c = 0; c < MAXC; c++) for (int k = 0; k < NCH; k++) begin
      sch_v[c][k] = 1'b0; sch_code[c][k] = 0;
    end
    for (int n = 0; n < 2 * NF; n++) for (int k = 0; k < NCH; k++) exp_x[n][k] = -1;
    for (int k = 0; k < NCH; k++) for (int a = 0; a < 256; a++) lut_m[k][a] = a;
    // phase 1 crossings (identity table), with one missing crossing
    for (int n = 0; n < NF; n++)
      for (int k = 0; k < NCH; k++)
        if (!(n == 7 && k == 4)) crossing(n, k, 1 + int'($urandom_range(119)), n);
    crossing(NF - 1, 5, 124, NF - 1);          // latest possible crossing
    repeat (3) @(negedge clk);
    rst = 1'b0;
    busy = 0;
    while (cal_busy) begin
      @(negedge clk);
      busy++;
    end
    check(busy >= 255 && busy <= 258, $sformatf("table sweep %0d cycles", busy));
    check(wraps > 0, "some crossings wrap into the next period");
    // wait for phase 1 to be issued
    while (nonempty < NF) @(negedge clk);
    // load a table into channel 2: a -> 255 - a
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      cal_ch = 3'd2; cal_addr = 8'(a); cal_data = 8'(255 - a); cal_req = 1'b1;
      while (!cal_ack) @(negedge clk);
      cal_req = 1'b0;
      while (cal_ack) @(negedge clk);
      lut_m[2][a] = 255 - a;
    end
    // phase 2 crossings, a few periods ahead of the current cycle
    begin
      int n1;
      n1 = (j / 2) - P0 + 4;
      for (int n = 0; n < NF; n++)
        for (int k = 0; k < NCH; k++)
          crossing(n1 + n, k, 1 + int'($urandom_range(119)), NF + n);
    end
    while (nonempty < 2 * NF) @(negedge clk);
    repeat (6) @(negedge clk);
    check(nonempty == 2 * NF, $sformatf("%0d non-empty frames", nonempty));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
