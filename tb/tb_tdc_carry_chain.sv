// tb_tdc_carry_chain: checks the delay-line model. A rising and a falling
// edge are sent into the chain; each tap must change exactly (k+1)*TAP_PS
// after the input, and the number of ones seen at a given time must equal
// the elapsed time divided by the stage delay.
// The 200 stages and the 20 ps stage delay are the platform's figures; the
// edge times tested are arbitrary.
`timescale 1ps/1ps
module tb_tdc_carry_chain;
  localparam int N = 200;
  localparam int D = 20;

  logic         hit;
  logic [N-1:0] taps;
  int checks = 0, failures = 0;

  tdc_carry_chain #(.N_TAPS(N), .TAP_PS(D)) dut (.hit_i(hit), .taps_o(taps));

  function automatic int ones(input logic [N-1:0] v);
    int c = 0;
    for (int i = 0; i < N; i++) c += int'(v[i]);
    return c;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hit = 1'b0;
    #10_000;
    check(taps == '0, "line empty");
    hit = 1'b0;
    #(N * D + 100);
    check(taps == '0, "line emptied after falling edge");
    for (int k = 0; k < N; k += 13) begin
      hit = 1'b0;
      #(N * D + 100);
      hit = 1'b1;
      #((k + 1) * D - 1);
      check(taps[k] == 1'b0, $sformatf("tap %0d not yet high", k));
      check(ones(taps) == k, $sformatf("thermometer length %0d before tap %0d", ones(taps), k));
      #2;
      check(taps[k] == 1'b1, $sformatf("tap %0d high", k));
      check(ones(taps) == k + 1, $sformatf("thermometer length after tap %0d", k));
    end
    #(N * D + 100);
    check(taps == '1, "line full");
    // falling edge: thermometer of zeros
    hit = 1'b0;
    #(50 * D + 5);
    check(ones(taps) == N - 50, "falling edge travelled 50 stages");
    check(taps[49:0] == '0 && taps[N-1:50] == '1, "zeros lead the line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
