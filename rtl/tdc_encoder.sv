// tdc_encoder: samples the delay-line taps and turns the thermometer code
// into a fine time code.
//
// How it works: the taps are captured on the rising edge of the 400 MHz
// sampling clock and registered once more against metastability. Tap k
// shows the input as it was (k+1) stage delays before the clock edge, so a
// rising edge that entered the line m stages ago appears as ones on taps
// 0..m-1 followed by zeros. The encoder looks for the first such 1-to-0
// boundary from tap 0, taken as a one followed by two zeros, so that a
// single zero inside the run (a bubble from uneven stage delays) does not
// end it. Its position m is the code: the number of stages the edge
// travelled before the clock edge. Only m <= WINDOW (the number of stages
// in one clock period, 2500 ps / 20 ps = 125) is a new hit; an edge seen
// further down the line was already reported at the previous clock edge.
// This also catches pulses shorter than a clock period, which are gone
// from tap 0 by the time of the sample. At most one hit (the most recent
// edge) per clock cycle is reported.
//
// Interface: taps_i is asynchronous; valid_o/code_o are registered in clk.
// Timing: the sample taken at clock edge n appears on valid_o/code_o after
// edge n+2 (three register stages).
// The delay line length follows the platform; the boundary search, the
// one-period window and the register stages are this design's choices.
// The line is longer than one period (200 stages = 4 ns > 2.5 ns), as the
// window needs.
`timescale 1ps/1ps
module tdc_encoder
  import cryo_pkg::*;
#(
  parameter int N_TAPS = TDC_TAPS,
  parameter int CODE_W = TDC_CODE_W,
  parameter int WINDOW = TDC_WINDOW
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_TAPS-1:0] taps_i,
  output logic              valid_o,
  output logic [CODE_W-1:0] code_o
);

  localparam int POS_W = $clog2(N_TAPS);

  // index_mask(j) has bit i set when bit j of i is set: OR-ing a one-hot
  // vector under these masks gives the index of its set bit.
  function automatic logic [N_TAPS-1:0] index_mask(input int j);
    logic [N_TAPS-1:0] m;
    for (int i = 0; i < N_TAPS; i++) m[i] = ((i >> j) & 1) != 0;
    return m;
  endfunction

  logic [N_TAPS-1:0] cap_q;     // capture register (may go metastable)
  logic [N_TAPS-1:0] smp_q;     // settled sample
  logic [N_TAPS+1:0] ext;       // sample with two zeros appended
  logic [N_TAPS-1:0] bnd;       // bnd[i]: tap i is 1, taps i+1 and i+2 are 0
  logic [N_TAPS-1:0] first;     // lowest set bit of bnd (one-hot)
  logic [POS_W-1:0]  idx;
  logic [CODE_W-1:0] pos;       // code: boundary index + 1
  logic              found;

  always_ff @(posedge clk) begin
    cap_q <= taps_i;
    smp_q <= cap_q;
  end

  // Priority encoder: isolate the boundary nearest tap 0 with
  // x & (~x + 1), then encode the one-hot result to binary.
  always_comb begin
    ext   = {2'b00, smp_q};
    bnd   = ext[N_TAPS-1:0] & ~ext[N_TAPS:1] & ~ext[N_TAPS+1:2];
    first = bnd & (~bnd + N_TAPS'(1));
    found = |bnd;
    pos   = CODE_W'(idx) + CODE_W'(1);
  end

  for (genvar j = 0; j < POS_W; j++) begin : g_idx
    localparam logic [N_TAPS-1:0] MASK = index_mask(j);
    assign idx[j] = |(first & MASK);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_o <= 1'b0;
      code_o  <= '0;
    end else begin
      valid_o <= found && (32'(pos) <= WINDOW);
      code_o  <= pos;
    end
  end

endmodule
