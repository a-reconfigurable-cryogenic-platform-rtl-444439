// tdc_carry_chain: behavioural model of the FPGA carry chain used as the
// TDC delay line. Not synthesizable logic: in the FPGA this is a chain of
// 50 CARRY4 primitives (200 stages) placed in one column.
//
// The edge on hit_i ripples through N_TAPS stages of TAP_PS picoseconds
// each; taps_o[k] is hit_i delayed by (k+1)*TAP_PS (a pure transport
// delay, so pulses of any width travel unchanged). The line starts empty. Sampling taps_o with a
// clock gives a thermometer code whose length is the time between the edge
// and the clock edge. The stage count and the ~20 ps stage delay follow the
// platform; the uniform stage delay is a simplification of this model (the
// real chain has the non-linearity the density test measures).
`timescale 1ps/1ps
module tdc_carry_chain
  import cryo_pkg::*;
#(
  parameter int N_TAPS = TDC_TAPS,
  parameter int TAP_PS = TDC_TAP_PS
) (
  input  logic              hit_i,
  output logic [N_TAPS-1:0] taps_o
);

  // Transport delay: every change of hit_i starts one process that walks
  // down the line, setting tap k (k+1)*TAP_PS after the change. Edges in
  // flight at the same time each keep their own timing, and nothing runs
  // while the input is quiet.
  initial taps_o = '0;

  always begin
    logic v;
    @(hit_i);
    v = hit_i;
    fork
      automatic logic vv = v;
      begin
        for (int k = 0; k < N_TAPS; k++) begin
          #(TAP_PS);
          taps_o[k] = vv;
        end
      end
    join_none
  end

endmodule
