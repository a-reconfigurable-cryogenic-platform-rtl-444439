// reset_sync: turns an asynchronous active-low reset pin into a reset that
// asserts at once and releases synchronously, STAGES edges of clk after the
// pin is released. Output rst_o is active high.
// Reset is not described by the platform; this scheme is this design's
// own, standard choice.
`timescale 1ps/1ps
module reset_sync #(
  parameter int STAGES = 2
) (
  input  logic clk,
  input  logic rst_ni,
  output logic rst_o
);

  logic [STAGES-1:0] sr_q;

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      sr_q <= '1;
    end else begin
      sr_q <= {sr_q[STAGES-2:0], 1'b0};
    end
  end

  assign rst_o = sr_q[STAGES-1];

endmodule
