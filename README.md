# MPWM-DAC SoC: a pulse-width DAC with split pulses and sub-clock edges

A pulse-width-modulation DAC turns an n-bit code into a one-bit stream.
The stream is high for `duty` clocks out of every `2^n`, and an analog
low-pass filter after it recovers the voltage. The DAC is tiny and
monotonic by construction. Its weak point is the filter. The ripple sits at
`f_clk / 2^n`, which is low for 12 bits at 100 MHz (24 kHz). So the filter
needs a low cut-off, and it then settles slowly.

This design attacks both limits:

* **MPWM (modified PWM).** The period is split into `SN = 2^SF`
  sub-regions. Each sub-region carries its own short pulse, and together
  the pulses give the same total high time as one long pulse. The main
  ripple moves up to `SN * f_clk / 2^n`, so a filter with a higher cut-off
  (and faster settling) suffices. The cost is just a rewiring of the
  counter bits.
* **HR-MPWM (high-resolution MPWM).** Four more bits come from moving one
  falling edge by sixteenths of a clock. The sixteenths are taps of a delay
  line that a delay-locked loop (DLL) holds at one clock period in total.
  The clock rate stays the same.

The DAC sits in a small RISC-V system-on-chip. Around a bus matrix are the
core's two bus ports, two 128 KB SRAMs, a 12-channel DMA, the DAC's
register block and an external-memory window. The DMA can stream samples
into the DAC, one per MPWM period, without the core.

The SystemVerilog is in `rtl/`, one module or package per file. A
self-checking testbench for every module is in `tb/`. The analog parts
(delay cells, delay line, DLL, set/reset output stage) are behavioural
models in the same language, with real-valued voltages and transport
delays. Everything else is synthesizable RTL.

## Module tree

```
soc_top                      SoC fabric (the RV32 core is outside, on two bus ports)
├── bus_matrix               3 masters x 5 slaves crossbar, round-robin per slave
├── sram  (x2)               128 KB instruction SRAM, 128 KB data SRAM
├── dma                      12 channels, one shared read/write engine
└── mpwm_dac                 register block of the DAC
    └── hrmpwm               high-resolution MPWM macro
        ├── hrmpwm_ctrl      shadow registers, output flip-flop, tap code
        │   └── mpwm_core    counter, bit rearrangement, comparator
        ├── dll              phase detector + charge pump + reference line
        │   └── vcdl         16 delay_cell in a chain
        ├── vcdl             signal-path line, taps P0..P15
        ├── phase_mux        balanced 16:1 tap selector
        └── delay_cell       matched cell on the set path
soc_pkg                      bus types, address map, register offsets
```

## The MPWM counter trick (`mpwm_core`)

A plain PWM compares `duty` with a free-running counter `C`. The output is
high for the first `duty` counts of the period. MPWM compares `duty` with a
rearranged counter `C_R` instead:

```
C_R = { C[n-SF-1:0], C[n-SF], C[n-SF+1], ..., C[n-1] }
         upper part           lowest SF bits of C_R = top SF bits of C, reversed
```

The top `SF` bits of `C` count the sub-regions (the *address* of the
sub-region). They become the *lowest* bits of `C_R`, in reverse order. The
low bits of `C`, the position inside a sub-region, move up. So inside each
sub-region `C_R` climbs in steps of `SN`, starting from the
bit-reversed sub-region address. The output `mpwm_out = duty > C_R` is
therefore high for a run of clocks at the start of every sub-region:

* each sub-region gets `floor(duty / SN)` clocks;
* the `duty mod SN` remaining clocks go one each to the sub-regions whose
  bit-reversed address is below `duty mod SN`.

The bit reversal spreads those leftover clocks evenly over the period and
does not bunch them together.

Example: `n = 5`, `SF = 2`, `duty = 19`. The four sub-regions have
addresses 0..3, with reversed ranks 0, 2, 1, 3. `19 = 4*4 + 3`, so
sub-regions with rank 0, 1 and 2 get 5 clocks and rank 3 gets 4 clocks:
5 + 5 + 5 + 4 = 19 ones per 32 clocks.

Details of the circuit:

* The counter counts up by one and wraps after `2^n - 1`. It holds 0 while
  `en` is low.
* `SF` is a run-time input from 0 to `n-1`. `SF = 0` gives plain PWM.
* The compare is strict (`duty > C_R`). The mean output is then exactly
  `duty / 2^n`, and a code of 0 gives a flat zero. A code reaches at most
  `2^n - 1` clocks high out of `2^n`.
* `mpwm_out` is combinational from the counter register. `period_end` is
  high in the last clock of the period.
* Edges per period: `2*duty` transitions for `duty <= SN`, `2*SN` for
  `SN <= duty <= 2^n - SN`, and `2*(2^n - duty)` above that. At most one
  pulse per sub-region, so at most `SN` rising edges per period. The
  testbench counts these.

## Sub-clock resolution (`hrmpwm`, `hrmpwm_ctrl`, `dll`)

This is the least obvious part of the design.

### Output stage

The coarse MPWM output is registered in one flip-flop, giving `Q` and its
complement `Qb`. The output `dac_out` comes from a set/reset stage:

* the rising edge of `Q`, delayed by one matched `delay_cell`, **sets**
  `dac_out`;
* `Qb` runs down a 16-cell delay line (`vcdl`) with taps `P0..P15`. Tap
  `Pk` lags `Qb` by `k+1` cells. `phase_mux` picks tap `P[d_ctrl]`, and its
  rising edge (the end of the coarse pulse, delayed) **resets** `dac_out`.

When every cell delays by `T_clk / 16`, a pulse of `w` clocks with tap code
`f` lasts exactly `w + f/16` clocks. The matched cell on the set side
cancels the first cell of the line. The stage is modelled edge-triggered:
each edge acts once, and a set wins if both edges land at the same time.

`phase_mux` is a balanced tree of 2:1 muxes, four levels deep. Every tap
then sees the same path, and `d_ctrl[l]` steers level `l` (`d_ctrl[0]`
picks among neighbouring taps).

### Delay calibration (`dll`)

The cells of the signal path share their control voltage `vc` with a
reference line of 16 identical cells inside the DLL. The DLL clocks that
line with the system clock and samples the line output on every rising
clock edge:

* the sample is high: the line is shorter than one period, so `vc` is
  lowered, which slows the cells;
* the sample is low: the line is too long, so `vc` is raised.

`vc` moves by `VC_STEP` per clock (a bang-bang charge pump). The loop walks
to the lock point and then dithers around it. `locked` rises after the
phase-detector decision has reversed `LOCK_COUNT` times, and stays high
until reset.

The cell model is `tau = TAU0_NS - KV_NS * vc`, floored at 50 ps, with
defaults 0.9 ns and 0.5 ns/V. At `vc = 0` the line is 14.4 ns. The loop
must start between half and one-and-a-half periods of delay, or it would
lock to the wrong edge. That gives a usable clock period of 9.6 ns to
28.8 ns with the default numbers. At 10 ns the loop settles at
`vc ≈ 0.55` (0.625 ns per cell). With `VC_STEP = 2 mV` the residual dither
is about ±1 ps per cell. That is far below the 625 ps step.

### Which pulse gets the fine part

With `SN` pulses per period, the fine code could be spread over several
pulses, or given to one. Here it goes to **one pulse per period**: the pulse
that ends in the *last* sub-region (address all ones). The reasons:

* the last sub-region is never completely full, because its reversed rank
  is `SN-1`. Its pulse always has a falling edge to move once
  `coarse >= SN`;
* every other pulse gets tap code 0, which is an exact whole-clock pulse;
* the mean output is `(coarse + fine/16) / 2^n`, so the 4 fine bits are
  the 4 least-significant bits of a 16-bit code.

If `coarse < SN`, the last sub-region has no pulse and the fine bits are
ignored. The DAC's effective resolution then drops to `n` bits near zero.
This is a limit of this scheme, not of the circuit.

### When the tap code may change

The mux must not switch while its inputs differ, or it would make a false
edge on the reset input. `hrmpwm_ctrl` changes `d_ctrl` only:

1. on the clock edge that starts a pulse (`mpwm_out` high and `Q` low). All
   taps are high at that point, or the one still rising has already
   reached the reset before the new set;
2. while `Q` has been high for two clocks. All taps are low then. This
   case covers a pulse that starts in a full sub-region and runs on into
   the last one.

An assertion in `hrmpwm_ctrl` checks that `d_ctrl` holds in the clock
after `Q` rises, while the taps are still changing.

### Settings per period

`duty`, `fine` and `sf` are copied into shadow registers at the end of
every period, and continuously while the block is disabled. A period never
mixes two settings. `load_pulse` marks the copy.

## MPWM-DAC registers (`mpwm_dac`)

Base address `0x4000_0000`:

| Offset | Name   | Bits |
|--------|--------|------|
| 0x000  | CTRL   | [0] enable, [7:4] SF (values above n-1 are taken as n-1), [8] DMA request enable |
| 0x004  | DUTY   | [n+3:4] coarse duty in clocks, [3:0] fine duty in sixteenths of a clock |
| 0x008  | STATUS | [0] DLL locked, [1] DMA request pending, [31:16] periods counted since reset (wraps) |

With DMA requests enabled, `dreq` rises at each period end and falls when
DUTY is written. A DMA channel paced by `dreq` and pointed at DUTY (fixed
destination) streams one sample per period. A new value takes effect at
the next period boundary, so a sample written during period k is played in
period k+1.

`dac_out` is the bit stream for the external filter. `dac_coarse_out`
(the clock-aligned `Q`) is brought out for measurement.

## On-chip bus (`soc_pkg`, `bus_matrix`)

All links use one simple protocol:

* request `{valid, we, addr[31:0], wdata[31:0], be[3:0]}`; response
  `{ready, rvalid, rdata[31:0]}`;
* a master holds its request steady until `ready`. The clock edge with
  `valid && ready` is the *accept*;
* the slave answers every accepted access exactly one clock later with
  `rvalid` (and `rdata` for reads). A master may put its next request up in
  that same clock, so one access per clock is possible;
* slaves add wait states by holding `ready` low.

`bus_matrix` is a full crossbar with 3 masters (core instruction port,
core data port, DMA) and 5 slaves. Every slave has its own round-robin
arbiter, which starts after the last master it served. Masters that use
different slaves proceed in the same clock. `conflict` flags a clock in
which two or more masters wanted the same slave. Assertions check both protocol rules
on every master port.

Address map:

| Range | Slave |
|-------|-------|
| `0x0000_0000 – 0x0001_FFFF` | instruction SRAM (128 KB) |
| `0x2000_0000 – 0x2001_FFFF` | data SRAM (128 KB) |
| `0x4000_0000 – 0x4000_0FFF` | MPWM-DAC registers |
| `0x4000_1000 – 0x4000_1FFF` | DMA registers |
| everything else | external memory interface (`ext_req` / `ext_rsp` ports) |

The SRAMs are always ready. They write bytes under `be` and return read
data one clock after the access. Their contents are not reset.

## DMA (`dma`)

Channel `c` has its registers at `0x10*c`:

| Offset | Name | Use |
|--------|------|-----|
| 0x0 | SRC  | source address |
| 0x4 | DST  | destination address |
| 0x8 | LEN  | words left |
| 0xC | CTRL | [0] enable, [1] SRC increments by 4, [2] DST increments by 4, [3] paced by `dreq[c]` |

At `0x100` is DONE, one sticky bit per channel; write ones to clear. `irq`
is high while any DONE bit is set.

A single engine moves one 32-bit word at a time: a bus read, then a bus
write. Between words it picks the next ready channel in round-robin order.
A channel is ready when it is enabled, has words left and, if paced, sees
its request high. When LEN reaches zero the channel clears its enable and
sets its DONE bit. A software write to a channel register wins over the
engine's own update in the same clock. In the SoC, channel 0 is wired to
the DAC's request. Channels 1..11 take `periph_dreq[11:1]` from outside.

## SoC top (`soc_top`)

`soc_top` has the matrix, the two SRAMs, the DMA and the DAC. The RISC-V
core is not part of this RTL. Its instruction and data ports are top-level
bus ports, and a core with this bus (or an adapter for another bus) plugs
in there. The external memory interface is also left outside as a bus
port. Default parameters: 12-bit MPWM with 4 fine bits, 128 KB per SRAM,
12 DMA channels.

## Decisions taken here, and departures from the source description

The published description of this SoC and its DAC stays mostly at block
level, and in a few places contradicts itself. These points were decided
here:

* **Strict compare.** One description of the comparator reads
  `duty >= C_R`, but the worked example (duty 19 gives 19 high clocks) and
  the stated mean duty `D / 2^n` both need `duty > C_R`. The strict form
  is used.
* **Where the sub-region address lives.** The conceptual generator in the
  source feeds the counter's *low* SF bits to the address decoder. The
  circuit description and the waveform drawings instead use the *top* SF
  bits of the counter, so each sub-region is one block of `2^(n-SF)`
  clocks. The circuit (the `C_R` rewiring above) is followed. The address
  shows up as the low bits of `C_R`, not of `C`.
* **Duty range.** One statement limits the duty code to `0 .. 2^(n-1)-1`.
  The waveform tables use the full `0 .. 2^n-1`. The full range is used.
* **SF range.** `SF` is given as 1..n-1 in one place and 1..10 (for 12
  bits) in another. The register accepts 0..n-1.
* **Which pulse carries the fine bits**, the rule for when the tap code may
  change, the matched set-side cell, and the shadow registers are not
  described in the source. All are this design's.
* **DAC placement.** The block diagram draws the DAC on a peripheral bus
  behind a bridge. The text says the core configures it over the
  high-speed bus. Here it sits on the matrix, since no bridge or peripheral
  bus is built.
* **Bus, address map, register maps, DMA behaviour, SRAM timing** are
  not given at all. They are the simplest choices that make the system
  work.
* **Analog numbers** (cell delay law, charge-pump step, lock detector) are
  the models' own. The source gives no circuit values.
* **Not built:** the RV32EMC core with its cache, debug port, interrupt
  controller and timer; the parallel computing core; non-volatile memory;
  the external memory controller; clock and reset control; bridges and all
  peripherals on them (timers, watchdogs, ADC, temperature sensor, GPIO,
  general PWMs, RTC, USB, serial interfaces); oscillators, PLL, bandgap,
  supply monitors; the off-chip filter and Wi-Fi module.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops on a
watchdog if the design hangs.

| Testbench | What it checks |
|-----------|----------------|
| `tb_mpwm_core` | n = 5: every SF and every duty against a sub-region model (ones per period, ones per sub-region, edge count); the duty-19 example clock by clock; n = 12 random codes |
| `tb_phase_mux` | every tap code with one-hot, one-cold and random tap patterns |
| `tb_delay_cell` | delay at several `vc` values, both edge directions, a pulse shorter than the delay still passes |
| `tb_vcdl` | tap k lags the input by k+1 cell delays, two `vc` values, both edges |
| `tb_dll` | locks within 1000 clocks at 10 ns and 12.5 ns; a separate line on the same `vc` then delays by one period within 40 ps |
| `tb_hrmpwm_ctrl` | n = 6: `Q` against the coarse reference, fine code only on the last-sub-region pulse, exactly one fine edge per period, settings applied only at period ends |
| `tb_hrmpwm` | n = 6, with the analog models: high time per period equals `coarse + fine/16` clocks within 50 ps, for listed and random SF/duty/fine values; rising-edge count; clock-aligned output keeps whole clocks |
| `tb_sram` | full 128 KB: byte-enable writes, random read-back, one-clock timing |
| `tb_bus_matrix` | three random masters on five slave models with random wait states: read data, one response per access, contention seen, round-robin bound (a waiting master is passed over at most twice) |
| `tb_dma` | incrementing copy, gather into a fixed word, paced channel (one word per request, in order), LEN = 0, DONE/irq and clearing, channels interleaving |
| `tb_mpwm_dac` | n = 6: register read-back, SF clamp, lock bit, period counter, request line, high time per period, DUTY applied from the next period |
| `tb_soc_top` | the whole SoC at default sizes: see below |

`tb_soc_top` plays the core and an external memory with random wait states.
It keeps fetching a program from the I-SRAM. It runs two DMA block copies
(D-SRAM to external memory, external memory to I-SRAM) and a paced channel
that feeds eight samples into the DAC. It measures `dac_out` in every
4096-clock period against the sample due in that period (SF = 3, then
SF = 7). It also counts that each mechanism actually happened: bus
contention, wait states, paced transfers, DLL lock, fine extension, fine
bits ignored below SN, settings at a period boundary, the SF switch and the
DMA interrupt. It runs in seconds.

## Simulating

With Verilator 5 (`--timing` for the delays; the package goes first):

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/soc_pkg.sv tb/tb_soc_top.sv --top-module tb_soc_top -o sim
./obj_dir/sim
```

Swap the testbench name to run any other. Every module declares
`timeunit 1ns; timeprecision 1ps`. Verilator warns (`ZERODLY`) that the
delay cell's delay is computed at run time; `-Wno-fatal` keeps that
warning from stopping the build. The whole-SoC test runs in a few seconds.

Things to change:

* `N` and `FINE` on `mpwm_dac` / `hrmpwm`. The delay line has `2^FINE`
  cells, so the clock period must still fit the DLL's range.
* `TAU0_NS`, `KV_NS` on `delay_cell` and `VC_STEP`, `VC_INIT`,
  `LOCK_COUNT` on `dll` set the analog behaviour. Keep `VC_INIT` such that
  the starting line delay is between 0.5 and 1.5 clock periods.
* The address map and register offsets are all in `soc_pkg`.

## Limitations

* The delay cells, the delay lines, the DLL and the set/reset stage are
  behavioural (real numbers, `#` delays). They show the timing intent and
  let the fine resolution be checked in simulation. They do not synthesize,
  and in silicon they are full-custom cells. The mux, the flip-flop and
  all control logic are synthesizable.
* The model has no jitter, mismatch between cells, or supply or
  temperature drift. INL/DNL of a real line is not represented.
* The fine bits act only when `coarse >= SN`.
* There is no CPU. The core's behaviour is what the SoC testbench does on
  the bus ports.
