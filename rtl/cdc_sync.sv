// cdc_sync: two-flop synchroniser for a slowly changing level crossing
// into clk. WIDTH independent bits; use it only for levels or for
// handshake signals that stay stable for several destination cycles.
// Output settles two clk edges after the input changes.
// Clock crossing is not described by the platform; this two-flop scheme
// is this design's own, standard choice.
`timescale 1ps/1ps
module cdc_sync #(
  parameter int   WIDTH = 1,
  parameter logic RESET_VAL = 1'b0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] q_o
);

  logic [WIDTH-1:0] meta_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      meta_q <= {WIDTH{RESET_VAL}};
      q_o    <= {WIDTH{RESET_VAL}};
    end else begin
      meta_q <= d_i;
      q_o    <= meta_q;
    end
  end

endmodule
