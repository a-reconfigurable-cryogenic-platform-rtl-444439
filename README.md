# A carry-chain TDC and interleaved ADC platform for a cryogenic FPGA

This RTL is the digital side of a classical control platform for qubits built on an
FPGA (a Xilinx Artix-7, XC7A100T) that is cooled to 4 K next to the quantum chip. The
idea is to replace analog electronics that would be hard to design for such low
temperatures with ordinary FPGA resources. Two measuring instruments come almost
entirely from logic:

* a **time-to-digital converter (TDC)** that measures when an edge arrives with a
  resolution of about 20 ps, and a **histogrammer** that gathers its results for the
  host;
* an **analog-to-digital converter (ADC)** that needs only a resistor per channel.
  An RC ramp is compared with the input by an LVDS receiver, and the comparator edge
  is time-stamped by a TDC. Six such channels, driven by six phases of a 200 MHz
  clock, give 1.2 GSa/s.

A host PC controls the platform and reads results over a slow UART (RX, TX, CTS).
Long cryostat cables limit that link to well below 1 MBd.

```
            clk_tdc (400 MHz)                                  clk_sys (100 MHz)
 hit_i --> tdc_carry_chain --> tdc_encoder --> tdc_histogrammer ==port B==> readout_ctrl <-- uart_rx <-- uart_rx_i
                                                 ^ acq_en, clear   <-sync-        |   |
 adc_hit_i[6] --> 6 x (carry chain + encoder) --> adc_merge <-- cal word <-sync---+   +--> uart_tx --> uart_tx_o
                                                    |                                          uart_cts_n_o
                                                    +--> adc_frame_o, adc_valid_o, adc_sample_o[6]
```

The clock manager that makes the two clocks, and the analog parts (the RC ramps and
the comparators), are not in the RTL. The clocks and the six comparator outputs are
ports of the top module, `cryo_tdc_top`.

## 1. The delay line and what a code means

`tdc_carry_chain` models the FPGA's fast carry logic used as a delay line. It has
200 stages, which are 50 CARRY4 blocks, each stage delaying the edge by about 20 ps.
In hardware this is a placed primitive. Here it is a behavioural model: tap `k`
shows `hit_i` as it was `(k+1) x 20 ps` earlier. The model has the same delay in
every stage. The real chain's differential non-linearity, up to several LSB, is not
modelled.

At each rising edge of the 400 MHz clock, `tdc_encoder` captures all 200 taps. A
rising edge that entered the line `m` stage delays before the clock edge leaves
ones on taps `0..m-1` and zeros after them. The code is `m`: the number of stages
the edge travelled before the sample. A larger code therefore means an earlier
edge, and the arrival time is `t_clock - 20 ps x code`.

Three points are less obvious:

* **The one-period window.** One clock period is 2500 ps, which is 125 stages. The
  line is 200 stages long, so an edge stays visible for more than one sample. The
  encoder reports only boundaries within the first `WINDOW = 125` stages. A boundary
  further down belongs to an edge already reported at the previous clock edge.
  Codes therefore run from 1 to 125 at the default sizes, and histogram bins 125 to
  199 stay empty. They exist because the source design's histogram has 200 bins, one per
  stage.
* **Bubbles.** Real carry chains sometimes show a single 0 inside the run of ones.
  The end of the run is taken as a one followed by *two* zeros, so a single bubble
  does not cut the code short.
* **Short pulses.** A pulse shorter than a clock period has already left tap 0 at
  the next sample. It still appears as a run of ones further down, and the encoder
  finds it, because it looks for the first 1→0 boundary rather than at tap 0.
  Comparator pulses in the ADC rely on this.

Latency: the taps are registered twice (capture, then a metastability stage) and
the code once more. The sample taken at clock edge `n` appears on
`valid_o`/`code_o` after edge `n+2`. At most one hit, the latest, is reported per
clock.

## 2. The histogrammer

`tdc_histogrammer` counts how often each code occurred. Code `c` (1..200) increments
bin `c-1`. There are 200 bins of 16 bits, and a bin saturates at 65535 instead of
wrapping. A density test, with hits spread uniformly in time, then gives each
stage's real width directly from its bin count.

The memory is a true dual-port block RAM:

* **Port A (clk_tdc)** does a read-modify-write over two cycles: it reads the bin
  at one edge and writes `count+1` at the next. A hit can arrive on every cycle.
  When two consecutive hits fall in the same bin, the second read would return the
  value from before the first write. The value just written is therefore
  *forwarded* into the adder instead (`fwd_o` flags it). One forwarding register
  suffices, because a write is visible to a read one cycle later.
* **Port B (clk_sys)** serves the readout. `rd_data_o` shows the bin one clk_sys
  cycle after `rd_en_i`.

**Clearing** writes zero to every bin, one bin per clk_tdc cycle, and drops hits
while it runs. It happens after reset and whenever the controller asks. The request
crosses clock domains with a four-phase handshake:

1. `clear_req` rises.
2. The sweep runs.
3. `clear_ack` rises.
4. The request falls.
5. The acknowledge falls.

## 3. Host protocol

The UART is 8 data bits, no parity, 1 stop bit, LSB first, at 115200 Bd: 868 clocks
of 100 MHz per bit. `uart_rx` synchronises the line, confirms the start bit at
mid-bit (shorter glitches are ignored) and samples every bit at its middle. A bad
stop bit is reported as a frame error.

`readout_ctrl` decodes one-byte ASCII commands:

| byte | action |
|------|--------|
| `G` | start counting hits |
| `H` | stop counting |
| `C` | clear all bins (handshake above); the counting state is kept |
| `R` | send all 200 bins, bin 0 first, each as two bytes, most significant first (400 bytes) |
| `W` `ch` `addr` `data` | write `data` at `addr` of ADC channel `ch`'s calibration table |

Other bytes are ignored.

If `R` arrives while counting, the controller works as follows:

1. It pauses acquisition.
2. It waits `SETTLE = 4` clk_sys cycles, so that the enable has crossed into clk_tdc
   and hits in flight have landed.
3. It reads and sends every bin.
4. It resumes counting.

This way the 400 bytes are one consistent snapshot. A readout takes 4000 bit
times, about 35 ms.

The receiver has no FIFO, so the platform drives a flow-control output,
`uart_cts_n_o`. It is low (clear to send) only while the controller is idle and can
take a command byte. The host must wait for it before each byte.

`status_o` (a packed `status_t` struct) shows these levels:

* `running`;
* `clearing`;
* `fwd`, a forwarding pulse;
* `paused`, a pulse when a read interrupts counting;
* `rx_err`, a UART frame error pulse;
* `cal_busy`.

## 4. The interleaved ADC

Each channel works like a single-slope converter:

1. The ramp clock rises.
2. The RC ramp climbs.
3. The LVDS comparator output rises when the ramp passes the input voltage.

The time from the ramp start to that edge measures the input. Channel `k` uses the
ramp clock shifted by `k x 60°`. With a 5 ns ramp period (200 MHz), six channels give
one conversion each per period: 6 x 200 MSa/s = 1.2 GSa/s. Each comparator output
drives its own delay line and encoder. `adc_merge` does the rest in clk_tdc. It
works in fine steps of 20 ps: one 400 MHz cycle has `FINE = 125` steps and one ramp
period has `CPR x FINE = 250`.

1. **Position in the period.** A counter `cyc_q` (0 or 1, since `CPR = 2` cycles
   per ramp period) starts at reset. A code `c` seen while `cyc_q = p` was sampled
   at a clock edge that lies `p` cycles into the ramp period. The encoder's two-cycle
   latency is a whole period. The crossing therefore happened at
   `ts = (p ? p : CPR) x FINE - c` steps after the period start. When `p = 0`, the
   edge is the one that closes the period, so it counts as `CPR x FINE`.
2. **Relative to the channel's ramp.** The ramp of channel `k` starts
   `OFF_k = k x 250 / 6` steps into the period (0, 41, 83, 125, 166, 208). The raw
   sample is `ts - OFF_k`. If `ts < OFF_k`, the crossing belongs to the ramp that
   started in the previous period: it has *wrapped* into this one. 250 is then added
   and the sample is filed with the previous frame.
3. **Calibration.** The raw sample, at most 249, addresses a 256 x 8-bit look-up
   table per channel. The table's output is the sample value. The table can correct
   the curvature of the RC ramp and each channel's offset and gain. After reset the
   tables are swept to the identity in 256 cycles (`cal_busy_o`). The host can
   then overwrite any entry with the `W` command. The word crosses to clk_tdc with a
   request/acknowledge handshake, and is held stable while the request is high.
4. **Frames.** Two frame buffers collect the six samples of a ramp period.
   * Every period (every two clk_tdc cycles) the older buffer is issued:
     `adc_frame_o` pulses and `adc_sample_o[k]` holds channel `k`.
   * Channels are in phase order, so channel 0 is the earliest sample of the frame.
   * A channel that saw no crossing has its bit in `adc_valid_o` low. That happens
     when the input was outside the ramp's range.

   A crossing appears in a frame issued 3 to 5 clk_tdc cycles after its code.

What a real system would do with the stream (decimation, storage, a feedback loop
for the qubits) is outside this design. Here the stream is simply brought out to
ports.

## 5. Clocks and resets

* `clk_tdc_i`, 400 MHz: delay lines, encoders, histogram port A, ADC merger.
* `clk_sys_i`, 100 MHz: UART, controller, histogram port B.

The six phases of the 200 MHz ramp clock only drive the analog ramps outside the
FPGA fabric and clock no logic here.

The two clocks are treated as unrelated:

* Single-bit levels cross through two-flop synchronisers (`cdc_sync`).
* The clear and calibration requests use four-phase handshakes.
* The calibration word itself is not synchronised, because it is held stable while
  its request is up.

`rst_ni` is an asynchronous, active-low input. `reset_sync` gives each domain its
own copy, asserted at once and released synchronously. The chain model has no reset:
it is a wire with delay.

## 6. What follows the source design and what does not

Taken from the published platform:

* 200-stage carry-chain delay line of 50 CARRY4 blocks, about 20 ps per stage,
  400 MHz sampling;
* a histogram of 200 bins of 16 bits, incremented per time stamp and read out over
  a UART to a host;
* a 100 MHz logic clock;
* the UART pins RX, TX and CTS, and a link slower than 1 MHz;
* the ADC principle of an RC ramp into an LVDS comparator, time-stamped by a TDC;
* six phases of a 200 MHz clock interleaved to 1.2 GSa/s, with calibration.

Choices of this design, where the source says only what a block does:

* the encoder: two-zero boundary search, one-period window, register stages;
* the histogram: read-modify-write pipeline with forwarding, saturation, clear
  sweep and handshake;
* the UART format and the 115200 Bd rate;
* the command set, byte order, pause-on-read and the CTS polarity and direction;
* the reset and clock-crossing scheme;
* in the ADC: the time-stamp arithmetic, the phase offsets, the wrap rule, the
  table-based calibration (the source names calibration but not its method), the
  sample width and the frame format.

Not built:

* the clock manager (MMCM/PLL);
* the IDELAYE2 input delays;
* the RC ramps and comparators;
* the on-die temperature diode;
* the DACs and the analog front end;
* the ring-oscillator bank used to sweep power for characterisation.
* the qubit-side processing (state estimation and correction), the local oscillator
  for the mixers and the ADC references, which the source design only draws as boxes.

All of these are either analog, vendor primitives or separate test designs. The
delay line exists only as a model, and on an FPGA it must be replaced by placed
CARRY4 primitives.

The model also idealises the sensors. It has uniform stages, no jitter, and ideal
comparators that rise exactly once per ramp. The tests show that the logic computes
the right codes, counts and samples for these ideal inputs. They say nothing about
linearity or ENOB on silicon.

## 7. Files, parameters and simulation

| file | contents |
|------|----------|
| `rtl/cryo_pkg.sv` | shared constants, command bytes, `status_t` |
| `rtl/tdc_carry_chain.sv` | delay-line model (`N_TAPS` = 200, `TAP_PS` = 20) |
| `rtl/tdc_encoder.sv` | thermometer-to-code encoder (`WINDOW` = 125) |
| `rtl/tdc_histogrammer.sv` | 200 x 16-bit histogram |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv` | UART, `CLKS_PER_BIT` = 868 |
| `rtl/readout_ctrl.sv` | command decoder and readout |
| `rtl/adc_merge.sv` | ADC time stamps → calibrated 1.2 GSa/s frames |
| `rtl/cdc_sync.sv`, `rtl/reset_sync.sv` | clock-crossing and reset helpers |
| `rtl/cryo_tdc_top.sv` | top level |

Every block has a self-checking testbench `tb/tb_<module>.sv`, which prints
`TB_RESULT checks=N failures=M`. Each testbench computes its expected values
independently: reference histograms, a UART model of the host, and a crossing →
code → sample model of the ADC.

`tb_cryo_tdc_top` runs the whole platform at its default sizes. It covers:

* an ADC burst of 400 periods;
* clear and start;
* 3000 TDC hits and two 400 MHz pulse trains, which make the histogram forward;
* a readout while counting, which pauses it;
* halt, clear and a second readout;
* 20 calibration writes;
* a second ADC burst with one missing crossing.

It counts each mechanism and fails if one never occurred. It simulates 77 ms, which
takes about one minute.

`tb_tdc_density` runs the TDC's main measurement, the code-density test, on the
same default-size top. It sends 12,000 hits at random phases to the clock, then
reads the histogram over the UART. Every bin must match an independently computed
reference, bins beyond one clock period must stay empty, and every bin within the
period must be hit. It simulates 35 ms in about 15 s. A density test on hardware
uses far more hits. The 16-bit bins hold about 75,000 hits per run over 125 bins
with a wide margin, even for a stage several times wider than average.

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/cryo_pkg.sv tb/tb_cryo_tdc_top.sv \
          --top-module tb_cryo_tdc_top -Mdir obj && ./obj/Vtb_cryo_tdc_top
```

Any other testbench runs the same way, with its name in place of `tb_cryo_tdc_top`.
The block testbenches finish in seconds. Some override parameters to stay short:
`tb_uart_*` use 16 clocks per bit, and the histogram test adds a 4-bit-counter
instance to reach saturation.

Notes for changing the sizes:

* `N_TAPS` must exceed `WINDOW` = clock period / `TAP_PS`.
* `N_BINS` should cover the codes the encoder can produce.
* In `adc_merge`, `FINE` must equal the clock period / `TAP_PS`. `TS_W` must hold
  `CPR x FINE - 1`.
