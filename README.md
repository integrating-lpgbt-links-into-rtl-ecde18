# lpGBT clock and trigger distribution for the ALICE Common Readout Unit

The ALICE Common Readout Unit (CRU) is an FPGA board. It receives the LHC clock
and the trigger information from the Local Trigger Unit over a 10G PON link. It
forwards both over radiation-hard optical links to the detector front-ends. The
forwarding must have a **deterministic latency**. A trigger must leave the CRU
the same number of picoseconds after it arrived, after every power-up, every
PLL relock and every link reset.

With the original GBT links this was easy. The PON receiver recovers a 240 MHz
clock, and the GBT transmitters also run at 240 MHz, so receive and transmit
share one clock domain. The newer lpGBT links need a **320 MHz** transmit
clock. The ratio to the PON clock is 4:3, so the trigger has to cross into a
clock domain whose phase is not fixed by construction.

This RTL solves that with two alignment loops. Both turn an unknown phase into a
known one:

1. An FPGA PLL divides the 240 MHz PON clock by six to make a 40 MHz "LHC"
   clock, and also makes a 320 MHz clock at exactly 8x that.
   A divide-by-six can lock on any of **six** phases. A state machine checks
   the phase against the PON valid bit and resets the PLL until it is the
   right one.
2. Each lpGBT link writes one frame per LHC cycle, on one of the eight edges of
   its own 320 MHz clock. A "Data Write Enable" pulse marks that edge, and it
   can sit on any of **eight** positions. A second state machine samples the
   pulse with the aligned 40 MHz clock. It moves the pulse one 320 MHz period
   at a time until the sample reads 1. That takes at most eight tries.

Once both loops are done, every clock edge on the trigger path is fixed relative
to the PON valid bit. The path itself is ordinary synchronous logic between
related clocks.

## Clock domains

| domain | source | phase after start-up | logic in it |
|---|---|---|---|
| 240 MHz PON clock `clk240` | PON receiver, external jitter cleaner | reference | trigger holding register, PLL control machine |
| 40 MHz `clk40` | IOPLL, 240 MHz divided by 6 | 1 of 6 (fixed by loop 1) | trigger register, source multiplexer, write-enable control machines |
| 320 MHz `clk320_out` | IOPLL, 8 x `clk40` | locked to `clk40` | none; leaves the FPGA for the lpGBT jitter cleaner |
| 320 MHz `txclk[i]` | transceiver of link *i*, fed by that jitter cleaner | fixed but unknown delay to `clk40` | write-enable generator and frame register of link *i* |

`txclk[i]` has the same frequency as `clk40 x 8`. Its phase relative to `clk40`
is a fixed delay through the board and the transceiver. That fixed delay is why
the `clk40` to `txclk` path can be timed like any synchronous path once the
write enable is aligned. The one-in-eight write-enable counter restarts at a
random place after every link reset. That is why loop 2 is needed.

## Loop 1: aligning the 40 MHz clock (`clk40_align_ctrl`)

The PON valid bit is high for one 240 MHz cycle in six. `clk40` samples it
directly. Every `clk40` rising edge falls on a 240 MHz edge, so the sample
reads the same value in every LHC cycle:

* 1 if the `clk40` edge is the 240 MHz edge that ends the valid cycle;
* 0 for each of the other five phases.

`clk40` stops while the PLL is in reset, so the state machine runs on
`clk240`. Its states are:

`PLL_RST` (16 cycles) -> `WAIT_LK` (PLL lock, synchronised) ->
`SETTLE` (32 cycles, so the synchronised sample is fresh) -> `CHECK`.

In `CHECK`, a 1 moves to `ALIGNED`. A 0 moves back to `PLL_RST`, and the PLL
then comes up on a new random phase. On average six attempts are needed. In
`ALIGNED` the machine keeps watching: if lock is lost or the sample turns to 0,
it starts over. `retries` counts the PLL resets.

All `clk40` logic is held in reset while `clk40_aligned` is low. The reset
follows a loss of alignment at once. It is released two `clk40` edges after
alignment.

## Loop 2: aligning each link's Data Write Enable (`dwe_gen`, `we_align_ctrl`)

`dwe_gen` runs on `txclk[i]`. A modulo-8 counter makes `dwe`, high for one
cycle in eight. A shift request holds the counter for one cycle, which delays
`dwe` by exactly one 320 MHz period. Requests come from the 40 MHz domain as a
level toggle (`shift_tgl`). They pass through a two-flip-flop synchroniser and
an edge detector, so each toggle gives exactly one shift.

`we_align_ctrl` runs on `clk40` and samples `dwe`. `dwe` repeats with exactly
the `clk40` period, so every sample of one phase reads the same value, and the
two-flip-flop synchroniser in front does not change the answer. The machine
loops through three steps:

1. wait `SETTLE_CYCLES` = 4 cycles;
2. sample;
3. if the sample is 0, toggle the shift request and go back to step 1.

When the sample reads 1, the link is aligned and `steps` reports the shifts
used (0-7). After eight shifts with no 1, the machine pulses `fail` and starts
over; this cannot happen with a healthy clock. An aligned link that later reads
a 0 also starts over. In the worst case, alignment takes 8 x 5 = 40 `clk40`
cycles.

What "aligned" means: `dwe` is high during the `txclk` cycle that contains a
`clk40` rising edge. The `txclk` edge that ends that cycle comes D after the
`clk40` edge, where D is the link's clock delay. It writes the frame that
`clk40` has just launched.

## The trigger path and its latency

Let E0 be the 240 MHz edge that launches a trigger word together with its
valid bit, and let T be the 240 MHz period (about 4.17 ns).

| time after E0 | event | module |
|---|---|---|
| 1 T | word loaded into the 240 MHz holding register; aligned `clk40` rises on this edge | `trg_cdc` |
| 7 T | word taken into the `clk40` register | `trg_cdc` |
| 13 T | word (or the DDG/slow-control data chosen for the link) in the multiplexer output register | `dl_mux` |
| 13 T + D_i | `txclk[i]` edge writes the frame into `tx_frame[i]`; `tx_clk_en[i]` is high for that `txclk` cycle | `lpgbt_dl_link` |

The latency is therefore **13 PON clock periods plus the link's fixed clock
delay**, after every alignment. The end-to-end testbench checks this to the
picosecond for every frame on all 24 links, over several PLL relocks and link
resets.

In the 240 MHz domain, the holding register is loaded on the same edge at which
the aligned `clk40` rises. That `clk40` edge therefore takes the previous word,
and the new word one LHC period later. This wastes one LHC cycle but leaves a
full 240 MHz period of setup on the crossing.

## Frame format and source multiplexer (`dl_mux`)

An lpGBT downlink carries 32 data bits and 4 control bits in each LHC cycle.
`lpgbt_ttc_pkg::dl_frame_t` packs them as `{ic[1:0], ec[1:0], data[31:0]}`:
two internal-control bits, two external-control bits, then the data.

Each link chooses its source with a 2-bit select:

| `src_sel` | data bits | IC/EC bits |
|---|---|---|
| `SRC_TTC` | trigger word from the PON receiver (shared by all links) | slow control |
| `SRC_DDG` | downlink data generator word of that link | slow control |
| `SRC_SC` | slow-control frame, whole | slow-control frame, whole |
| `SRC_IDLE` | 0 | 0 |

The multiplexer output is registered on `clk40`.

## Hierarchy and top-level ports

```
cru_lpgbt_ttc               top, N_LINKS = 24
  iopll_model               behavioural model of the FPGA I/O PLL
  clk40_align_ctrl          loop 1
  trg_cdc                   240 MHz -> clk40 trigger transfer
  dl_mux                    per-link source select
  lpgbt_dl_link x N_LINKS   per-link downlink user interface
    dwe_gen                 Data Write Enable, txclk domain
    we_align_ctrl           loop 2, clk40 domain
lpgbt_ttc_pkg               ratios, widths, frame struct, state enums
```

Ports of `cru_lpgbt_ttc`:

* **PON receiver:** `clk240`, `rst240` (synchronous, active high), `pon_valid`,
  `pon_trg[31:0]`.
* **Clocks out:** `clk40_out` (aligned LHC clock) and `clk320_out` (to the
  external jitter cleaner).
* **Transceivers, per link:** `txclk[i]`, `txrst[i]` in; `tx_frame[i]` and
  `tx_clk_en[i]` out. The outputs are the frame and clock enable for the
  lpGBT-FPGA downlink encoder.
* **Multiplexer sources, per link:** `src_sel[i]`, `ddg_data[i]`,
  `sc_frame[i]`.
* **Status:** `clk40_aligned`, `pll_retries`, and per link `link_aligned[i]`,
  `link_fail[i]`, `link_steps[i]`.

## What is outside this RTL

These parts are not in the RTL; their signals are ports of the top.

* **PON receiver (TTC module).** It supplies the 240 MHz clock, the trigger
  bits and the valid bit. How the PON frame is reduced to the 32 downlink
  trigger bits is left to it.
* **External jitter-cleaner PLLs.** There is one for the 240 MHz clock and one
  for the 320 MHz lpGBT reference.
* **lpGBT-FPGA IP and the FPGA transceivers.** They hold the scrambler, FEC
  encoder, serialiser and the receive side. Each link's IP gets `tx_frame[i]`
  and `tx_clk_en[i]`, and returns `txclk[i]` and `txrst[i]`.
* **The uplink path.** This is lpGBT receive at 320 MHz, 128 or 256 bits per
  LHC cycle at 5.12 or 10.24 Gb/s, into the CRU user logic. It is not modelled
  here.
* **Other CRU firmware.** Slow control, the downlink data generator, the
  datapath wrappers, the PCIe DMA engines, readout control and the bus arbiter
  are the existing CRU firmware.

The IOPLL is an FPGA hard block. `iopll_model` is a behavioural model that
measures the reference period and schedules the 40 and 320 MHz edges with
delays. After every reset it picks a random 40 MHz phase. Replace it with the
vendor PLL when building for hardware. Everything else is synthesizable.

## Where this implementation makes its own choices

The published description gives the two alignment procedures: what is sampled,
what a match means, PLL reset on mismatch, one-period shifts, at most eight
steps. It also gives the clock ratios, the payload widths and the link count.
The following are choices of this implementation:

* the PLL control machine runs on the 240 MHz clock, with a 16-cycle reset
  pulse and a 32-cycle settle time;
* a single comparison decides each attempt;
* both machines keep monitoring after alignment and restart on loss;
* shift requests cross clock domains as a toggle;
* the write-enable control machine waits 4 cycles between comparisons, and
  pulses `fail` after eight fruitless shifts;
* the two-register trigger transfer;
* the reset sequencing of the `clk40` domain;
* the IC/EC split of the 4 control bits;
* the `tx_clk_en` interface to the lpGBT-FPGA IP;
* the source-select encoding, and the registered multiplexer.

One write-enable generator and one control machine are used per link. Links
whose transceivers share a parallel clock could share them.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_iopll_model` | 6:1 and 8:1 ratios, edge coincidence, quiet outputs in reset, more than one start phase over 24 resets |
| `tb_clk40_align_ctrl` | with the PLL model: every `clk40` edge sees the valid bit while `aligned`; retries equal the PLL resets; realignment after the LHC marker moves |
| `tb_trg_cdc` | the word order, and a latency of 7 T from launch to `trg40` |
| `tb_dwe_gen` | period 8; one 9-cycle gap per shift request, and no other gap |
| `tb_we_align_ctrl` | against an independent write-enable model: all eight start phases align in at most eight comparisons; `steps` equals the shifts received; a stuck `dwe` gives `fail` after 8 shifts; realignment |
| `tb_lpgbt_dl_link` | each `tx_clk_en` comes with the latest `clk40` frame; the write edge is exactly D after the `clk40` edge in every run; one write per 8 cycles |
| `tb_dl_mux` | every source on 6 links against a reference function; reset |
| `tb_cru_lpgbt_ttc` | the full design at 24 links (below) |

`tb_cru_lpgbt_ttc` runs the top at its default size. Its four runs cover:

* all-TTC operation;
* mixed sources;
* a moved LHC marker that forces the whole chain to realign.

In every run it checks, on all 24 links:

* every frame's contents;
* the latency, 13 T + D_i, the same across runs;
* that triggers arrive with no gap or repeat;
* that a counting pattern on the DDG links arrives without a gap.

It also counts that each mechanism actually happened: PLL resets for a wrong
phase, write-enable shifts, links aligned with no shift, realignment, and every
source.

To simulate, for example the end-to-end test:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  --top-module tb_cru_lpgbt_ttc -y rtl -y tb +libext+.sv -Irtl \
  rtl/lpgbt_ttc_pkg.sv tb/tb_cru_lpgbt_ttc.sv
obj_dir/Vtb_cru_lpgbt_ttc
```

The testbenches give delays in nanoseconds, so keep `--timescale 1ns/1ps`.
The full 24-link test takes well under a second.

Two notes on simulation:

* The testbenches model the board delay of each transmit clock with a transport
  delay (`txclk <= #D clk320`). Keep D below half a 320 MHz period. With
  Verilator 5, a delayed continuous assignment (`assign #D`) of these clocks
  lost edges.
* Two-state simulators start registers at random values. The reset of the
  `clk40` domain is therefore a level taken from `clk40_aligned`, not only an
  edge.

## Limits

* **The simulated speeds are fixed.** The PON clock period is 4.168 ns, and the
  link delays are 0.2-1.35 ns. Jitter and metastability are not modelled. The
  synchronisers are there for hardware, not for these tests.
* **Only part of the published link test is simulated.** That test ran about
  10^14 bits per link in loopback through the front-end ASIC. The
  known-pattern test here covers the downlink side only, for a few hundred LHC
  cycles.
* **The PLL model's lock time (64 reference cycles) is arbitrary.** Real lock
  times are far longer. This changes only how long alignment takes.
