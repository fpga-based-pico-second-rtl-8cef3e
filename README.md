# Dual-threshold timestamp TDC readout for a DIRC-like TOF detector

A time-of-flight detector that uses Cherenkov light in a fused-silica radiator
read out by an MCP-PMT has to time each particle to a few tens of picoseconds.
The readout described here does that with almost nothing but an FPGA. The
discriminator is made from two of the FPGA's own LVDS input receivers used as
comparators at two different thresholds, and the time of each comparator edge
is measured inside the FPGA by a tapped-delay-line TDC (time-to-digital
converter). The low threshold gives the time of the pulse front edge, early on
the rise where pulses of different heights differ least in timing. The high
threshold only confirms that the pulse was a real signal. Logic behind the
TDCs keeps the confirmed events and, when two detectors (or one detector split
in two) are read out together, keeps only the particles both saw.

This RTL covers the digital part of that readout, following the paper
"FPGA Based Pico-second Time Measurement System for a DIRC-like TOF Detector"
(Cao, Li, Wang, Kuang, Wang, Li). The paper describes the system at block
level. It specifies the structure: two thresholds, a TDC per threshold, a
filter module per chain, and a coincidence of two chains. It names the
ones-counter encoding of the TDC. Every width, window length, clock rate and
handshake below is this design's own choice. The sections say which is which.

## Signal path

```
              outside the FPGA             |  inside the FPGA (dtof_tdc_top)
                                           |
 MCP-PMT -> amplifier -> bias network -+-> LVDS comparator, low  -> hit_lo[c] -> delay line -> TDC channel -+
 (per chain)                            |                                                                    +-> filter_module -+
                                        +-> LVDS comparator, high -> hit_hi[c] -> delay line -> TDC channel -+                  |
                                                                                                                                 +-> coincidence_module -> out
                                             (same again for chain c = 1) ------------------------------------> filter_module -+
                                                  coarse_counter: one counter shared by all four TDC channels
```

The amplifier converts the single-ended PMT pulse into a differential pair.
The resistor-capacitor bias network then shifts the two legs of the pair
apart by a small voltage and keeps their common mode unchanged. The LVDS
receiver switches only when the signal difference exceeds that offset, so the
offset is the threshold. Two differently biased copies give the two
thresholds. These parts are analog or vendor I/O, so they are not in the RTL.
The top module starts at the comparator outputs, `hit_lo[1:0]` and
`hit_hi[1:0]`, one pair per chain.

## From a comparator edge to a timestamp

This is the heart of the design. Each comparator output has its own TDC
channel, built from three parts.

**Delay line** (`tapped_delay_line`, behavioural model). The rising edge of
`hit` sets a front-edge latch. The latch output runs into a chain of `TAPS`
delay elements, each `TAP_PS` long. In a Xilinx 7-series part these are the
carry-chain multiplexers, and the flip-flop after each element is clocked by
the system clock. At every rising clock edge the flip-flops therefore hold a
thermometer code. Taps `0 .. n-1` are 1, where `n` is the number of delays the
edge has passed since it arrived. Without the latch, a comparator pulse
shorter than the line would show up as a band of ones whose length is the
pulse *width*. The latch makes the count depend only on the front edge. The
model uses equal taps and simulation time. A real chain has bins of uneven
width and needs to be built from the vendor's carry primitives with the same
ports (see "Building for an FPGA").

**Ones-counter encoder** (`ones_counter_encoder`). The fine time is the
number of ones in the sampled code, not the position of the 0/1 boundary.
Metastability and uneven carry timing leave "bubbles" near the boundary
(a 0 inside the ones or a 1 just past them). A boundary search can be thrown
off by a whole group of taps, while a count moves only by the size of the
bubble. This counting scheme is what the paper uses. The two-stage pipeline
here is this design's choice: 16-bit slices are counted and registered, then
the slice counts are added and registered. The latency is 2 cycles and the
encoder accepts a code every cycle.

**Channel control** (`tdc_channel`). A two-state machine:

| state  | `clr` | leaves when                          | action |
|--------|-------|--------------------------------------|--------|
| ARMED  | 0     | tap 0 of the sampled code is 1       | sends this code to the encoder, notes the coarse time |
| DRAIN  | 1     | the sampled code is all zeros        | latch held clear; the falling edge runs out of the line |

The channel starts in DRAIN after reset. One clock after detection, `clr`
goes high. The line's latch is cleared at the next edge. The falling edge then
needs one to two periods to leave a line about one clock period long. Then
the channel re-arms. Hits that arrive between detection and re-arming are
lost. With the default sizes this dead time is 5 to 6 clock periods from the
hit, about 14 ns at 400 MHz.

**Timestamp.** Every channel stamps its hits with the value of the shared
`coarse_counter`, taken at the clock edge that sampled the code:

```
hit time = coarse * T_clk - fine * T_tap        (coarse counted from reset release)
```

The fine count says how long *before* that edge the hit arrived, so a larger
fine value means an earlier hit. The fields are `timestamp_t {coarse[31:0],
fine[8:0]}` from `tdc_pkg`. The coarse count wraps after 2^32 periods. The
first edge at least one tap delay after the hit is the one that detects it.
The timestamp is valid three clock cycles after that edge (1 for detection, 2
for the encoder). Because every channel uses the same counter, timestamps of
different channels and chains can be subtracted directly. No bin-width
calibration is applied: with real, uneven bins, `fine` has to go through a
code-density lookup before the formula above holds to the picosecond.

With 12 ps taps the quantisation alone gives 12/sqrt(12) = 3.5 ps RMS per
channel. That is close to the 3.9 ps the authors report for their own TDC.

## Event judgement with two thresholds (`filter_module`)

On a rising pulse the low threshold is crossed first. Its timestamp is
held for up to `CONFIRM_WINDOW` (2) cycles, waiting for the high-threshold
channel:

- high hit in the same cycle or within the window: one event `event_t
  {t_lo, t_hi}` leaves one cycle later (both times are kept, so that an
  offline walk correction from the two crossings stays possible);
- no high hit in time: the low hit is noise, dropped and counted in
  `n_rejected`;
- a second low hit before confirmation: the older one is dropped and
  counted, the newer one waits;
- a high hit with nothing waiting: ignored.

The window counts in TDC output cycles. The low and high channels have the
same latency, so this equals the coarse-time difference of the two
crossings. For a 160 ps rise time the crossings fall in the same or the next
clock period.

## Coincidence of the two chains (`coincidence_module`)

In both of the authors' measurements two chains are read out together. In
one, a single detector's pulse is split into two chains to measure the
electronics alone. In the other, two detectors sit in a beam. The
coincidence module holds a good event of either chain for up to `CM_WINDOW`
(4) cycles. If the other chain delivers an event in that time, or in the same
cycle, the pair `coinc_t {a, b}` leaves one cycle later. An event that finds
no partner, or is replaced by a newer one from its own chain, is dropped and
counted in `n_single`. Only pairs go to the host, which forms
`t(a.t_lo) - t(b.t_lo)`.

## Top-level interface (`dtof_tdc_top`)

| port             | dir | width        | meaning |
|------------------|-----|--------------|---------|
| `clk`            | in  | 1            | system clock, also the delay-line sampling clock (400 MHz assumed) |
| `rst_n`          | in  | 1            | synchronous, active low; resets the coarse counter to 0 |
| `hit_lo[1:0]`    | in  | 2            | low-threshold comparator output of chain 0/1 (asynchronous) |
| `hit_hi[1:0]`    | in  | 2            | high-threshold comparator output of chain 0/1 (asynchronous) |
| `out_valid`      | out | 1            | one-cycle strobe: a coincident pair |
| `out`            | out | `coinc_t`    | `{a:{t_lo,t_hi}, b:{t_lo,t_hi}}`, 4 x 41 bits |
| `n_rejected[2]`  | out | 2 x 16       | unconfirmed low-threshold hits per chain |
| `n_single`       | out | 16           | events without a partner in the other chain |

`out_valid` rises exactly 5 clock cycles after the latest of the four
sampling edges that detected the pair's hits: 3 in the TDC channel, 1 in the
filter and 1 in the coincidence module. There is no back-pressure. The output
is meant to be written into whatever link carries data to the host computer.
The paper does not describe that link, so it is not part of this design.

Parameters of the top:

| parameter        | default | origin |
|------------------|---------|--------|
| `TAPS`           | 256     | own choice; 256 x 12 ps = 3.07 ns covers one 2.5 ns clock period |
| `TAP_PS`         | 12      | own choice, a typical carry-chain bin; used by the model only |
| `CONFIRM_WINDOW` | 2       | own choice, in clock cycles |
| `CM_WINDOW`      | 4       | own choice, in clock cycles (10 ns) |

`tdc_pkg` fixes `COARSE_W = 32`, `FINE_W = 9` (so `TAPS` must stay below
512) and the 16-bit counters.

## Where this departs from, or goes beyond, the paper

- The delay line, its front-edge latch, the arming and clearing sequence, the
  timestamp format, the clock rate and all sizes are this design's choices.
  The paper only says that the TDC is a timestamp TDC in the FPGA with
  ones-counter encoding, taken from the authors' earlier work.
- Refinements common in delay-line TDCs, such as sampling the line more than
  once or calibrating the bin widths, are not described in the paper and are
  not built here.
- The filter and coincidence rules (window lengths, what is dropped, that
  both thresholds' times are kept) follow the paper's one-sentence
  descriptions of what the two modules do. Their mechanics are invented.
- Amplifier, bias network, LVDS comparators and the host link are outside
  this RTL.

## Building for an FPGA

Everything except `tapped_delay_line` is synthesizable. For an FPGA build,
replace that module with one that has the same ports and contains a
set-on-edge flip-flop, `TAPS/4` chained `CARRY4` primitives, and one
flip-flop per tap clocked by `clk`. It also needs placement constraints that
keep the chain in one column. `TAP_PS` then no longer applies, and `fine`
needs a code-density calibration table as noted above.

## Simulation

All testbenches are self-checking and print `TB_RESULT checks=N
failures=M`. Each one builds on its own with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/tdc_pkg.sv \
    tb/dtof_tdc_top_tb.sv --top dtof_tdc_top_tb && ./obj_dir/Vdtof_tdc_top_tb
```

| testbench                  | what it shows |
|----------------------------|---------------|
| `tapped_delay_line_tb`     | sampled codes match the hit time, drain after a clear, hits ignored while cleared |
| `ones_counter_encoder_tb`  | counts of clean, bubbled and random codes; exactly 2 cycles latency |
| `tdc_channel_tb`           | 300 random hits: coarse and fine values from the hit time, 3-cycle latency, hits in the dead time lost, a 10 ns pulse counted once |
| `filter_module_tb`         | confirmation at 0..2 cycles, late and missing confirmation, lone high hits, replaced low hits |
| `coincidence_module_tb`    | pairs at -4..+4 cycles, pairs 5 cycles apart dropped, singles, replaced events |
| `dtof_tdc_top_tb`          | end to end at default parameters: all four timestamps of every pair, 5-cycle latency, dead-time pulses, filter rejections, coincidence drops, confirmations in a later clock period |
| `dtof_ctr_tb`              | the two measurements of the paper, 3000 particles each (below) |

`dtof_ctr_tb` repeats the authors' two measurements as far as a logic
simulation can. Each particle reaches both chains at a random clock phase.
Each chain's edge gets Gaussian jitter of CTR/sqrt(2), where CTR is the
paper's result: 5.6 ps for the split signal and 15.0 ps for the two detectors
in the beam. The RMS of the chains' time difference must then be
sqrt(CTR^2 + 2 * 12^2/12). The runs give 7.4 ps against 7.44 ps expected, and
16.0 ps against 15.8 ps. This shows that the timestamps and the coincidence
pairing are correct down to the bin size. It cannot say anything about the
real jitter of the comparators or the carry chain.
