// uart_tx: UART transmitter, 8 data bits, no parity, one stop bit, LSB
// first, idle high.
//
// A byte is accepted when valid_i and ready_o are both high; ready_o stays
// low for the whole frame (10 bit times of CLKS_PER_BIT clk cycles each)
// and rises in the cycle after the stop bit ends. The frame format and the
// bit time are this design's choices; the host link only has to stay well
// below 1 MBd because of the long, poorly terminated cables.
`timescale 1ps/1ps
module uart_tx
  import cryo_pkg::*;
#(
  parameter int CLKS_PER_BIT = UART_CLKS_PER_BIT
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] data_i,
  input  logic       valid_i,
  output logic       ready_o,
  output logic       tx_o
);

  localparam int CNT_W = $clog2(CLKS_PER_BIT);

  logic [9:0]       shift_q;   // stop, data[7:0], start
  logic [3:0]       bits_q;    // bits left to send
  logic [CNT_W-1:0] cnt_q;

  assign ready_o = (bits_q == 4'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      shift_q <= '1;
      bits_q  <= '0;
      cnt_q   <= '0;
      tx_o    <= 1'b1;
    end else if (bits_q == 4'd0) begin
      tx_o <= 1'b1;
      if (valid_i) begin
        shift_q <= {1'b1, data_i, 1'b0};
        bits_q  <= 4'd10;
        cnt_q   <= '0;
      end
    end else begin
      tx_o <= shift_q[0];
      if (32'(cnt_q) == CLKS_PER_BIT - 1) begin
        cnt_q   <= '0;
        shift_q <= {1'b1, shift_q[9:1]};
        bits_q  <= bits_q - 4'd1;
      end else begin
        cnt_q <= cnt_q + CNT_W'(1);
      end
    end
  end

endmodule
