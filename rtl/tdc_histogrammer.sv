// tdc_histogrammer: block-RAM histogram of TDC time codes.
//
// Every valid code c in 1..N_BINS increments bin c-1, so a density test
// (many hits uniformly spread in time) yields the width of every delay
// stage. The memory has N_BINS words of COUNT_W bits; counters saturate at
// all-ones instead of wrapping. Codes 0 and above N_BINS are dropped.
//
// How it works: an increment is a read-modify-write over two cycles of
// clk_tdc: the bin is read at one edge and the incremented value is written
// at the next. When two hits in a row fall in the same bin, the second read
// returns the value before the first write, so the word just written is
// forwarded instead (one forwarding register is enough because a write is
// always visible to the read one cycle after it). One hit per cycle is
// accepted with no stall.
//
// Clearing uses a four-phase handshake with the system clock domain:
// clear_req_i (already synchronised into clk_tdc) starts a sweep that
// writes zero to every bin, one per cycle; clear_ack_o goes high when the
// sweep is done and low again after clear_req_i falls. Hits are ignored
// while the sweep runs. Reset also starts a sweep, so the memory never
// holds stale counts.
//
// The read port runs in clk_sys (true dual-port block RAM): rd_data_o
// shows bin rd_addr_i one clk_sys cycle after rd_en_i. Reading while
// counting is allowed by the memory but the value may be mid-update, so
// the controller pauses acquisition before it reads.
//
// The bin count and counter width follow the platform (16 bits for each
// of 200 bins); saturation, forwarding, the clear sweep and the handshake
// are this design's choices.
`timescale 1ps/1ps
module tdc_histogrammer
  import cryo_pkg::*;
#(
  parameter int N_BINS  = HIST_BINS,
  parameter int COUNT_W = HIST_COUNT_W,
  parameter int CODE_W  = TDC_CODE_W,
  localparam int ADDR_W = $clog2(N_BINS)
) (
  // time-code side
  input  logic               clk_tdc,
  input  logic               rst_tdc,
  input  logic               acq_en_i,     // synchronised into clk_tdc
  input  logic               hit_valid_i,
  input  logic [CODE_W-1:0]  hit_code_i,
  input  logic               clear_req_i,  // synchronised into clk_tdc
  output logic               clear_ack_o,
  output logic               clearing_o,
  output logic               fwd_o,        // a forwarded increment this cycle
  // readout side
  input  logic               clk_sys,
  input  logic               rd_en_i,
  input  logic [ADDR_W-1:0]  rd_addr_i,
  output logic [COUNT_W-1:0] rd_data_o
);

  logic [COUNT_W-1:0] mem [N_BINS];

  // ---- stage 0: accept a hit and read its bin -----------------------------
  logic              s0_v;
  logic [ADDR_W-1:0] s0_addr;

  always_comb begin
    s0_v    = acq_en_i && hit_valid_i && !clearing_o
              && (hit_code_i != '0) && (32'(hit_code_i) <= N_BINS);
    s0_addr = ADDR_W'(hit_code_i - CODE_W'(1));
  end

  // ---- stage 1: increment, with forwarding of the last write --------------
  logic               s1_v;
  logic [ADDR_W-1:0]  s1_addr;
  logic [COUNT_W-1:0] s1_rd;
  logic               w_v_q;
  logic [ADDR_W-1:0]  w_addr_q;
  logic [COUNT_W-1:0] w_data_q;
  logic [COUNT_W-1:0] base, incr;

  always_comb begin
    fwd_o = s1_v && w_v_q && (w_addr_q == s1_addr);
    base  = fwd_o ? w_data_q : s1_rd;
    incr  = (base == '1) ? base : base + COUNT_W'(1);
  end

  // ---- clear sweep ---------------------------------------------------------
  logic [ADDR_W-1:0] clr_addr_q;

  always_ff @(posedge clk_tdc) begin
    if (rst_tdc) begin
      clearing_o  <= 1'b1;
      clr_addr_q  <= '0;
      clear_ack_o <= 1'b0;
    end else if (clearing_o) begin
      if (32'(clr_addr_q) == N_BINS - 1) begin
        clearing_o  <= 1'b0;
        clear_ack_o <= clear_req_i;
      end
      clr_addr_q <= clr_addr_q + ADDR_W'(1);
    end else if (clear_req_i && !clear_ack_o) begin
      clearing_o <= 1'b1;
      clr_addr_q <= '0;
    end else if (!clear_req_i) begin
      clear_ack_o <= 1'b0;
    end
  end

  // ---- pipeline registers --------------------------------------------------
  always_ff @(posedge clk_tdc) begin
    if (rst_tdc) begin
      s1_v  <= 1'b0;
      w_v_q <= 1'b0;
    end else begin
      s1_v  <= s0_v;
      w_v_q <= s1_v;
    end
    s1_addr  <= s0_addr;
    w_addr_q <= s1_addr;
    w_data_q <= incr;
  end

  // ---- memory port A (clk_tdc): read for stage 0, write for stage 1/clear -
  always_ff @(posedge clk_tdc) begin
    s1_rd <= mem[s0_addr];
    if (clearing_o) begin
      mem[clr_addr_q] <= '0;
    end else if (s1_v) begin
      mem[s1_addr] <= incr;
    end
  end

  // ---- memory port B (clk_sys): readout -----------------------------------
  always_ff @(posedge clk_sys) begin
    if (rd_en_i) begin
      rd_data_o <= mem[rd_addr_i];
    end
  end

endmodule
