// uart_rx: UART receiver, 8 data bits, no parity, one stop bit, LSB first.
//
// The line is synchronised with two flops. A falling edge starts a frame;
// the start bit is checked at its middle, then each data bit and the stop
// bit are sampled CLKS_PER_BIT cycles apart, in the middle of the bit.
// valid_o pulses for one cycle with data_o when a frame with a good stop
// bit ends; a bad stop bit pulses frame_err_o instead. A start bit that is
// gone at mid-bit is treated as a glitch. The format is this design's
// choice, matching uart_tx.
`timescale 1ps/1ps
module uart_rx
  import cryo_pkg::*;
#(
  parameter int CLKS_PER_BIT = UART_CLKS_PER_BIT
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rx_i,
  output logic [7:0] data_o,
  output logic       valid_o,
  output logic       frame_err_o
);

  localparam int CNT_W = $clog2(CLKS_PER_BIT);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_e;

  state_e           state_q;
  logic [1:0]       sync_q;
  logic [CNT_W-1:0] cnt_q;
  logic [2:0]       bit_q;
  logic [7:0]       shift_q;
  logic             rx;

  assign rx = sync_q[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q      <= 2'b11;
      state_q     <= IDLE;
      cnt_q       <= '0;
      bit_q       <= '0;
      shift_q     <= '0;
      data_o      <= '0;
      valid_o     <= 1'b0;
      frame_err_o <= 1'b0;
    end else begin
      sync_q      <= {sync_q[0], rx_i};
      valid_o     <= 1'b0;
      frame_err_o <= 1'b0;
      unique case (state_q)
        IDLE: begin
          cnt_q <= '0;
          if (!rx) state_q <= START;
        end
        START: begin
          if (32'(cnt_q) == CLKS_PER_BIT / 2 - 1) begin
            cnt_q   <= '0;
            bit_q   <= '0;
            state_q <= rx ? IDLE : DATA;
          end else begin
            cnt_q <= cnt_q + CNT_W'(1);
          end
        end
        DATA: begin
          if (32'(cnt_q) == CLKS_PER_BIT - 1) begin
            cnt_q   <= '0;
            shift_q <= {rx, shift_q[7:1]};
            bit_q   <= bit_q + 3'd1;
            if (bit_q == 3'd7) state_q <= STOP;
          end else begin
            cnt_q <= cnt_q + CNT_W'(1);
          end
        end
        STOP: begin
          if (32'(cnt_q) == CLKS_PER_BIT - 1) begin
            cnt_q   <= '0;
            state_q <= IDLE;
            if (rx) begin
              data_o  <= shift_q;
              valid_o <= 1'b1;
            end else begin
              frame_err_o <= 1'b1;
            end
          end else begin
            cnt_q <= cnt_q + CNT_W'(1);
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
