# Tunable digital downconverter (TDD) for narrow-band radio spectroscopy

A spectrometer that looks at an 800 MHz wide IF band gets much finer
frequency resolution, for the same number of channels, if it first cuts out
a narrow sub-band, shifts that sub-band to baseband and lowers the sample
rate to what the sub-band needs. This RTL does that in one block, and every
setting can change while it runs: the centre frequency `C_f`, the bandwidth
`B_w` (set through an integer decimation factor `D` from 5 to 12), and the
taps of both filters. Nothing has to be rebuilt to change the band.

The architecture is the tunable digital downconverter described in
N. Sane, J. Ford, A. I. Harris and S. S. Bhattacharyya, "Prototyping
scalable digital signal processing systems for radio astronomy using
dataflow models" (an FPGA design for the CASPER IBOB board). That article
gives the block diagram, the rates, the tap counts and the structure of the
decimation filter. The word widths, register map, latencies and the exact
form of the routing sequence are this implementation's own. The section
"How this RTL relates to the published design" lists every departure.

## Signal chain

```
              8 x 8 bit / clock                                   8 x 18 bit + 8 valid
   ADC ──► tunable_fir ──┬──────────────────► select_mux ──► tdf ──► downstream
  1.6 GS/s  (8 taps)     │                        ▲          (D = 5..12, 16 taps,
                         └──► mixer ──────────────┘           2 x 16-tap units)
                                ▲
                               nco (cos, f_LO)
   sw_regs: mode, D, routing sequence, f_LO step, FIR taps, TDF taps, restart
```

* **Baseband mode** (`C_f = B_w/2`, the band starts at 0 Hz). The FIR is a
  low-pass filter. Its output goes straight to the decimation filter and the
  mixer is bypassed.
* **Band mode.** The FIR is a band-pass filter around `C_f`. A real mixer
  multiplies the band by `cos(2π f_LO t)` from a numerically controlled
  oscillator, with `f_LO = C_f − B_w/2`. This moves the band to `[0, B_w]`
  and puts an image above it. The decimation filter's low-pass taps remove
  the image before the rate drops. The output is real-valued.
* **Decimation.** The output rate is `1.6 GS/s / D`, so `B_w = 800 MHz / D`:
  from 160 MHz (`D = 5`) down to 66.7 MHz (`D = 12`).

The "fork" in the block diagram is simply the fan-out of the FIR output to
the mixer and to the select block. It has no logic of its own.

## Eight samples per clock

The ADC produces 1.6 GS/s, but the fabric runs at 200 MHz. So the ADC hands
over **eight consecutive samples per clock**, and every block works on eight
lanes at once. Lane 0 holds the oldest sample of the block (`x[8c]`) and
lane 7 the newest (`x[8c+7]`). There is no handshake. One block arrives on
every clock on which the common enable `en` is high. When `en` is low the
whole pipeline holds its state.

* `tunable_fir`: lane `i` computes `Σ_j g[j]·x[8c+i−j]`. It keeps the
  previous block as history and uses 64 multipliers (8 lanes × 8 taps).
* `nco`: a phase accumulator advances by `8·step` per clock. Lane `k` reads
  phase `acc + k·step`. Each lane has its own dual-port sine memory
  (`nco_dpram`, 1024 × 18 bit). Port A reads the sine at the lane's phase.
  Port B reads the same table a quarter period later, which gives the
  cosine. Only the cosine is used, because the mixer is real.
* `mixer`: eight multipliers, one per lane.

## The tunable decimation filter (`tdf`)

This is the part that makes the design tunable, and the least obvious one.
It computes

```
y[m] = Σ_{j=0..15} h[j] · x[m·D − j]            (then >>> 17, saturated)
```

It computes only the outputs that are kept. With eight input samples per
clock and `D ≥ 5`, each clock's block contains either zero, one or two
*output instants* `n = m·D`. The filter therefore has two 16-tap
multiply–add units (`tap_unit16`, 32 multipliers in all). Unit 0 computes
the first output instant of a block and unit 1 the second. That is enough
for the full input rate at every `D` in range.

**Signal router (`tdf_router`).** The router keeps the two previous blocks
plus the current one, 24 samples in all. For each unit that has an output
instant on lane `off` of the current block, it hands the unit the window
`x[n], x[n−1], …, x[n−15]`. Which lanes carry output instants repeats with a
period of `P = D / gcd(D, 8)` clocks, which is at most 11. That pattern is
the **routing sequence**. Host software computes it for the chosen `D` and
writes it into twelve 8-bit registers, one entry per clock of the period:

```
entry c (c = 0 .. P-1), bits  [7] v1  [6:4] off1  [3] v0  [2:0] off0
v0/off0: first sample n in 8c .. 8c+7 with n mod D == 0 (unit 0)
v1/off1: second such sample, if any (unit 1)
```

The hardware derives `P` from `D` (it is `D` with its factors of two
removed). A sequence counter steps through entries `0 … P−1`. Examples:

| D | P | entries (hex)                               |
|---|---|---------------------------------------------|
| 5 | 5 | D8 FA 0C E9 0B                              |
| 6 | 3 | E8 0C 0A                                    |
| 8 | 1 | 08                                          |
| 11| 11| 08 0B 0E 00 09 0C 0F 00 0A 0D 00            |

For `D = 5`, block 0 holds instants 0 and 5 (`D8`: unit 0 on lane 0, unit 1
on lane 5). Block 1 holds 10 and 15 (`FA`), block 2 holds 20 (`0C`), and so
on.

**Output MUX (`tdf_outmux`).** Output sample `m` leaves on lane `m mod 8`.
Its lane's valid bit `tdd_valid[lane]` is high for exactly one clock, and
the data register holds the sample after that. A downstream block reads the
lanes in order 0, 1, …, 7, 0, … and takes each sample when its valid bit is
high. On average `8/D` lanes are valid per clock.

**Restart.** Writing 1 to bit 1 of `CTRL` produces a one-clock restart
pulse. After it, the first block counts as samples 0…7: the router's
sequence counter goes to entry 0, the NCO phase goes to 0, and the output
lane pointer goes to lane 0 together with the first result that follows.
Restart after changing `D` or the routing sequence. Samples already in the
pipeline still come out before the first new result.

## Choosing a band

| quantity | value |
|---|---|
| decimation factor | `D = 800 MHz / B_w`, integer 5…12 |
| routing sequence | from `D` as above |
| NCO step (band mode) | `round(f_LO / 1.6 GHz · 2^32)`, `f_LO = C_f − B_w/2` |
| FIR taps (8) | low-pass (baseband) or band-pass around `C_f`, Q1.17 |
| TDF taps (16) | low-pass with cut-off near `B_w`, Q1.17 |

The workload testbench shows two complete settings with their taps:

* `B_w` = 160 MHz, `C_f` = 80 MHz, baseband, `D` = 5.
* `B_w` = 80 MHz, `C_f` = 400 MHz, band mode, `f_LO` = 360 MHz, `D` = 10.

The taps are windowed sinc designs computed in the testbench. With only 8
and 16 taps the filters roll off gently. Tones well outside the band are
attenuated by more than 20 dB in that test. The filters give no sharp band
edge.

## Registers

The register port is synchronous, one write per clock (`wr_en`, `wr_addr`,
`wr_data`), and read-back is combinational (`rd_addr` → `rd_data`). The
datapath keeps running while registers are written.

| addr | name | contents | reset |
|---|---|---|---|
| 0x00 | CTRL | bit0 mode (1 = band mode through the mixer); bit1 restart, self-clearing | 0 |
| 0x01 | DECIM | `D`, 5…12 | 8 |
| 0x02 | PHASE_INC | NCO phase step per sample, 32 bit | 0 |
| 0x10–0x1B | ROUTE0–11 | routing sequence entries | entry 0 = 0x08 (D = 8), rest 0 |
| 0x20–0x27 | FIR0–7 | tunable FIR taps, 18-bit signed Q1.17 | identity: FIR0 = 0x1FFFF |
| 0x30–0x3F | TDF0–15 | decimation filter taps, 18-bit signed Q1.17 | 0 |

## Number formats

| point | format |
|---|---|
| ADC input | 8-bit signed |
| taps, NCO cosine | 18-bit signed, Q1.17 (fits an 18×18 multiplier) |
| FIR output | `(Σ g·x) >>> 10`, saturated to 18 bits: a full-scale tone at unity FIR gain is ×128 the ADC code |
| mixer output | `(x·cos) >>> 17`, saturated: a tone keeps its scale, each mixing product has half the amplitude |
| TDF output | `(Σ h·x) >>> 17`, saturated to 18 bits |

All shifts are arithmetic, so they round toward −∞. Every stage saturates
instead of wrapping.

## Timing

Latencies are counted in enabled clocks, from the clock on which a block is
presented at the input to the clock on which the result is visible.

| block | latency |
|---|---|
| `tunable_fir` | 2 |
| `nco` (accumulator to cosine) | 2 |
| `mixer` | 2 |
| `select_mux` | 1 |
| `tdf` (router 1, unit 2, MUX 1) | 4 |
| whole TDD, baseband path | 7 (35 ns at 200 MHz) |
| whole TDD, band path | 9 (45 ns) |

The two paths into `select_mux` are not delay-matched. After a mode switch,
the output instants simply move by two blocks relative to the ADC stream.
Issue a restart after the switch anyway.

Throughput is one input block per clock at every `D`. There is no
back-pressure anywhere.

Assertions check the rules the configuration must follow: `D` in 5…12
while running, and in each routing entry a second instant only after a
first one on a higher lane.

## Files

| file | contents |
|---|---|
| `rtl/tdd_pkg.sv` | widths, tap counts, `route_entry_t`, `cfg_t`, register addresses, saturation and period helpers |
| `rtl/tdd_top.sv` | the downconverter: all blocks wired as in the chain above |
| `rtl/sw_regs.sv` | run-time registers |
| `rtl/tunable_fir.sv` | 8-lane, 8-tap FIR |
| `rtl/nco.sv`, `rtl/nco_dpram.sv` | oscillator and its dual-port sine memory (table computed at elaboration) |
| `rtl/mixer.sv` | real mixer |
| `rtl/select_mux.sv` | baseband/band select |
| `rtl/tdf.sv` | decimation filter: `tdf_router`, two `tap_unit16`, `tdf_outmux` |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_tdd_top.sv` | end-to-end, bit-exact, at the default sizes |
| `tb/tb_tdd_workloads.sv` | tone tests of two band settings |
| `tb/tdd_ref_pkg.sv` | reference arithmetic shared by the testbenches (saturation, sine table, routing sequence) |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and ends with
`$finish`. Each has a watchdog. Example with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_tdd_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/tdd_pkg.sv tb/tdd_ref_pkg.sv tb/tb_tdd_top.sv -o sim
./obj_dir/sim
```

Replace `tb_tdd_top` with any other testbench name. All testbenches run in
well under a second.

What they establish:

* **Per block.** Each block is compared with an integer model written from
  the formulas above. This includes the exact latency, stalls (`en` low),
  saturation, and for the router and filter every `D` from 5 to 12, with the
  routing sequence computed independently in the testbench.
* **`tb_tdd_top`.** This test programs the design only through its
  registers. It visits all eight values of `D`, alternating baseband and
  band mode with random taps and NCO steps, and streams random ADC data with
  random stalls. Every output sample is compared bit-exactly with a chained
  model (FIR, NCO/mixer, select, decimator) that includes lane placement and
  latency. It also counts that stalls, bypass outputs, mixer outputs, mode
  switches, retuning, restarts, clocks with both 16-tap units busy, and
  saturated outputs each occurred.
* **`tb_tdd_workloads`.** This test checks behaviour rather than bits. A
  40 MHz tone passes the 160 MHz baseband setting at unity gain, and a
  600 MHz tone is suppressed. A 410 MHz tone in the 360–440 MHz band comes
  out at 50 MHz at 160 MS/s, and a 200 MHz tone is suppressed.

## How this RTL relates to the published design

These points follow the published design:

* 8-bit ADC samples, eight per 200 MHz clock, and eight lanes through every
  block.
* A tunable FIR with up to 8 taps that does not decimate.
* An NCO built from dual-port memories pre-loaded with a sinusoid, each
  reading sine and cosine together, with the sine discarded.
* A real mixer, and a fork/select bypass of the mixer for baseband outputs.
* A decimation filter with up to 16 taps, integer `D` from 5 to 12, and a
  signal router fed by `D` and a software-computed routing sequence.
* Two 16-tap units in tandem (32 multipliers), and a MUX onto eight outputs
  with each output on the next lane.
* A valid/enable signal marking output data.
* All parameters in run-time registers, with enable inputs on the blocks.

These points are this implementation's own, or depart from the published
design:

* **Widths and scaling.** The 18-bit datapath, Q1.17 taps, shift amounts,
  saturation and the 1024 × 18 sine table are all chosen here. The
  published design gives no internal widths.
* **Routing-sequence format.** The format and the derivation of the period
  from `D` are chosen here. The published design only says that software
  computes the routing and writes it to registers.
* **Filter structure.** The published decimation filter is called a
  polyphase implementation, and its internal organisation is not given
  beyond the router, the two 16-tap units and the MUX. Here each unit
  forms one kept output as a direct 16-tap sum over a window the router
  selects. Like a polyphase filter, it computes only the outputs that are
  kept, so it needs `16 · 8/D` multiplications per clock on average. The
  difference is that the products are grouped by output, not by phase.
* **Latency.** 7/9 clocks (35/45 ns) here. The published FPGA build
  reports 65 ns for a baseband-only version and 150 ns for the version with
  the mixer. Those figures come from its own pipelining, which is not
  described.
* **Enable.** The blocks share one clock enable, `en`. The published design
  gives each block an enable input.
* **Output valid.** The output valid is one bit per lane. The published
  design speaks of a single synchronization/enable signal that may clock
  the downstream system.
* **Bypass source.** The dataflow graph that accompanies the published
  design feeds the mixer-bypass path from the raw ADC copy. Its block
  diagram and text feed it from the FIR output, and this RTL follows the
  block diagram.
* **Tap counts.** Both filters always use their full tap count (8 and 16).
  Shorter filters are obtained by writing zero taps.
* **Multiplier count.** The FIR uses 64 multipliers and the mixer 8. The
  published resource figures (Xilinx slices, LUTs, block RAMs, 18×18
  multipliers) belong to a different implementation of the same
  architecture and are not reproduced here.
* **Register map and restart.** The register map, the reset values and the
  restart strobe are chosen here.
* **Not included.** The ADC, the XAUI link or downstream spectrometer, and
  the host software that computes register values are outside this RTL. The
  ADC bus, the output lanes and the register port are top-level ports.
* **Cascades not built.** The two-stage cascades that the published design
  evaluates as alternatives (two decimation filters, or a fixed decimator
  followed by a tunable one, for total factors such as 50 or 22) are not
  built. Neither is the fixed power-of-two decimator from the CASPER
  library that it is compared with.
