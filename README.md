# Ring oscillator PUF with characterization-driven, randomized placement

A ring oscillator PUF (physical unclonable function) turns the small,
random speed differences between nominally identical ring oscillators on an
FPGA into a device-specific bit string. Pick two oscillators, let both run
for a fixed window, count their edges, and the sign of the count difference
is one response bit. The weak point of such PUFs is reliability: if two
oscillators are nearly equally fast, temperature or supply changes flip the
sign and the bit.

The design documented here is the one described by A. S. Chauhan, V. Sahula
and A. S. Mandal, "Novel Randomized Placement for FPGA Based Robust ROPUF
with Improved Uniqueness" (J. Electronic Testing, 2019). The hardware is a
classic two-group RO PUF driven by an LFSR. What makes it robust and unique
is not in the logic. It lies in *which* FPGA locations receive the
oscillators. Every slice of the device is measured once at enrollment. Then
M locations with widely spaced frequencies are picked, split into two
groups, and put into the slots in a random order. This RTL gives the PUF
hardware. The selection flow is host software, and it enters the RTL only as
the list of oscillator frequencies per slot.

## Structure

```
                  EN                          ┌──────────────┐
   ┌─────────────┬───────────────────────────►│ CNT UP       │──count_up──┐
   │             ▼                            │ pulse_counter│            ▼
   │   ┌──────────────────────────────┐  ro   └──────────────┘     ┌────────────┐
   │   │ upper group  ro_group (M/2)  │──────────────▲             │ comparator │──► R
   │   │ 1-to-M/2 ─► M/2 rings ─► M/2-to-1           │             └────────────┘
   │   └──────────────────────────────┘              │                   ▲
   │             ▲ C[SEL_W-1:0]                       │ EN, clear         │
   │   ┌─────────┴──────────┐     ┌──────────────┐   │    ┌──────────────┐│
   │   │ challenge_lfsr (W) │◄────│puf_controller│───┴───►│ CNT DN       │┘
   │   └─────────┬──────────┘     └──────────────┘        │ pulse_counter│
   │             ▼ C[W-1:SEL_W]                           └──────────────┘
   │   ┌──────────────────────────────┐  ro                      ▲
   └──►│ lower group  ro_group (M/2)  │──────────────────────────┘
       └──────────────────────────────┘
```

| module | role |
|---|---|
| `ropuf_top` | the whole PUF: two groups, LFSR, two counters, comparator, controller |
| `ro_group` | M/2 oscillators with their enable demux and output mux |
| `ring_oscillator` | behavioural model of one enable-gated ring with its output latch |
| `ro_enable_demux` | "1-to-M/2": sends EN only to the selected ring of a group |
| `ro_output_mux` | "M/2-to-1": passes the selected ring to the group's counter |
| `pulse_counter` | counts edges of the selected ring while EN is high ("CNT UP" / "CNT DN") |
| `count_comparator` | R = 0 if count_up >= count_dn, else 1 |
| `challenge_lfsr` | maximal-length LFSR, one state per challenge |
| `puf_controller` | sequences clear, run, settle, compare and step for each challenge |
| `ropuf_pkg` | LFSR polynomials, width helpers, controller state type |

## One response bit

For each challenge C the controller takes four phases, all counted in
system clock cycles:

1. **Clear** (`CLR_CYCLES` = 2). Both counters are held in asynchronous clear.
2. **Run** (`T_ON_CYCLES` = 12287). EN goes high. In each group only the
   ring that C selects is enabled. Its output, through the group mux, clocks
   that group's counter. After the window the count is α = f · t_on.
3. **Settle** (`SETTLE_CYCLES` = 4). EN is low, so the rings stop and the
   latch holds their level. The counts are now static.
4. **Compare** (1 cycle). The comparator output is registered as `resp`,
   and `resp_valid` is high for one cycle. `challenge` still shows the C
   that produced the bit. A further **step** cycle then advances the LFSR.

Each bit therefore takes `CLR + T_ON + SETTLE + 2` = 12295 cycles. A whole
run, from the clock edge that accepts `start` to the edge that raises
`done`, takes `(2^W − 1)·12295 − 1` cycles: 3,135,224 cycles (31.4 ms at
100 MHz) for the default M = 32. The window of 12287 cycles is 122.87 µs at
the assumed 100 MHz clock. 122.87 µs is the published enable pulse length.

**Clock domains.** Each counter is clocked by an oscillator, not by the
system clock. The system clock domain reads the counts only after the settle
phase, when no oscillator runs, so no synchronizer is needed; the counts are
quasi-static. The clear is asynchronous for the same reason: a stopped
counter has no clock edge to clear on. The challenge changes only while EN is
low. Changing the mux select can put a stray edge on a counter clock, but the
counter ignores edges while EN is low, and the next clear phase removes any
count anyway. The counters saturate at all ones. At 16 bits and 122.87 µs
they overflow only above 533 MHz, well above the 395–442 MHz that the
target FPGAs show.

## Challenges and response length

A challenge picks one of M/2 oscillators in each group. It therefore has
W = 2·log2(M/2) bits. The low half selects the upper-group ring, the high
half the lower-group ring. A Fibonacci LFSR with a maximal-length
polynomial walks through all 2^W − 1 non-zero states from the seed, one
response bit per state. This gives the response lengths 15, 63, 255 and 1023
for M = 8, 16, 32 and 64. The polynomials are in `ropuf_pkg`:
x^4+x^3+1, x^6+x^5+1, x^8+x^6+x^5+x^4+1, x^10+x^7+1, and so on up to W = 16.
A zero seed is replaced by 1. Seeding the LFSR with a random value rotates
the response sequence.

The main configuration is M = 32: 32 oscillators in 32 slices, an 8-bit
LFSR and a 255-bit response. This is the parameter default.

## Where the PUF's quality comes from: the slot contents

The logic above is the same for every device. What differs is the frequency
of the ring in each slot. The enrollment flow decides it as follows. It runs
on a host and is not part of this RTL:

* **Characterization.** A separate configuration covers the whole FPGA with
  oscillators, one per slice, outside a central area kept free for other
  logic. Each oscillator is counted for 122.87 µs, 32 times, and the counts
  are sent to a host over a UART at 115200 baud. On Zynq parts this goes
  over AXI through the processor system. Locations whose normalized standard
  deviation σ/μ exceeds Th = 0.002 (about 5 % of them) are discarded. The
  slice position relative to the switch box (top L, bottom L, bottom M)
  shifts the frequency through routing delay. Using all three kinds on
  purpose ("biased placement") widens the frequency range, by 1.43× on a
  Basys-3.
* **Selection.** A modified k-means with M clusters runs over the remaining
  frequencies. In every iteration it snaps the centroids to existing
  frequencies and keeps the centroid set with the largest minimum pairwise
  frequency difference χ. A relocation pass then moves the centroid next to
  the smallest gap towards the larger neighbouring gap, repeatedly, to raise
  χ further.
* **Group assignment.** The M selected frequencies are split into the upper
  and the lower group, M/2 each. A fraction κ = i/2^(x−1), with
  x = log2(M/2), is assigned at random and the rest in sorted order. κ
  trades uniformity against randomness; κ = 0.375 or 0.5 for M = 32 passed
  the NIST tests.
* **Randomized placement.** The slot order within each group is shuffled.
  This breaks the response patterns that sorted placement would repeat across
  devices, which is what raises uniqueness.

In the RTL all of this is the two parameter arrays `UG_HALF_PS` and
`LG_HALF_PS` of `ropuf_top`. They give the half period d = 1/(2f), in
picoseconds, of the ring in each slot of the upper and lower group. The
defaults describe an example device. It has 32 frequencies evenly spread
over 395–442 MHz, a span close to the 47 MHz seen with biased placement, in
a shuffled slot order. They are illustrative values, not measured data. To
model another device, or the output of the enrollment flow, override both
arrays. If M is changed, both must be given with M/2 entries.

## The oscillator model

`ring_oscillator` is a behavioural model. It is for simulation, not
synthesis. The real ring is an enable AND gate and an odd number of
inverters, three in the reference drawing, hand-placed in one slice,
followed by a latch element. While `en` is high the model toggles `ro_out`
every `HALF_PERIOD_PS`. While `en` is low it holds the last level, which is
how the model reads the latch. Synthesis tools see a latch in an inverting
loop and report a combinational loop. That is expected, because a ring
oscillator is one. To build the PUF on an FPGA, replace the model by
LUT-level instances with placement and routing constraints. The rest of
the RTL is ordinary synchronous logic, except that the counters are
clocked by the oscillators.

The model has no noise or jitter, and it has no temperature or voltage
dependence. It therefore shows how the PUF works but says nothing about
its reliability. Two slots with equal half periods give equal counts and
R = 0.

## Parameters of `ropuf_top`

| parameter | default | meaning |
|---|---|---|
| `M` | 32 | oscillators in total, M/2 per group |
| `T_ON_CYCLES` | 12287 | run window in clock cycles (122.87 µs at 100 MHz) |
| `CLR_CYCLES` | 2 | counter clear phase |
| `SETTLE_CYCLES` | 4 | wait after EN falls before comparing |
| `COUNT_W` | 16 | counter width |
| `UG_HALF_PS`, `LG_HALF_PS` | example device | half period per slot, ps |
| `N`, `SEL_W`, `W` | derived | M/2, log2(M/2), 2·SEL_W: leave alone |

Ports: `clk`, `rst_n` (asynchronous, active low), `start` (one-cycle pulse,
taken when idle), `seed[W-1:0]`, then `resp`, `resp_valid`,
`challenge[W-1:0]`, `count_up`, `count_dn`, `busy` and `done` (one-cycle
pulse after the last bit). The counts stay readable after `done` until the
next `start`.

## Simulating

All files use `timescale 1ns/1ps`, and the model needs timing support:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ropuf_pkg.sv tb/tb_ropuf_top.sv \
          --top-module tb_ropuf_top -o sim && ./obj_dir/sim
```

Every testbench ends with `TB_RESULT checks=N failures=F`.

| testbench | what it runs | wall time |
|---|---|---|
| `tb_<block>` | each block alone, against values computed in the testbench | < 1 s |
| `tb_ropuf_top` | M = 8, 2 µs window, three full responses (seeds 0x9, 0x3, 0) | < 1 s |
| `tb_ropuf_workloads` | M = 8, 16, 32 and 64 in parallel, 3 µs window, one full response each | ~1 min |
| `tb_ropuf_full` | default parameters: M = 32, 122.87 µs window, all 255 bits | ~2 min |
| `tb_ropuf_uniqueness` | 12 simulated M = 32 devices, 1 µs window: inter-device Hamming distance with randomized and with sorted placement | ~2.5 min |

The system-level testbenches predict every bit independently of the RTL.
Their own LFSR model is written from the polynomial exponents. The
expected counts are floor((t_on − d − 1)/(2d)) + 1, with a tolerance of one
count. The expected bit comes from comparing the two half periods. The
testbenches also check the run length in cycles. `tb_ropuf_top` counts how
often each mechanism happened: both response values, every challenge,
every slot of both groups, seed reload and the zero-seed guard. It fails
if any of them never happened.

## Uniqueness in simulation

`tb_ropuf_uniqueness` shows why the slot order matters. Each simulated
device has the same evenly spread set of 32 frequencies, plus a few
picoseconds of device-specific variation that is too small to change their
ranking. This is roughly what the selection step produces on every board.
The testbench gives every device one full 255-bit response. It then
computes the mean pairwise fractional Hamming distance between devices:

| placement | devices | mean HD_inter |
|---|---|---|
| sorted: location k into slot k/2 of the upper (even k) or lower (odd k) group | 4 | 0.0000 |
| randomized: device-seeded shuffle of the 32 locations over the slots | 8 | 0.4916 |

With sorted placement every device compares the same ranks and so gives
the same response. Shuffling the slots per device brings the distance
close to the ideal 0.5. The original measurements over 54 boards report
a uniqueness of 49.90 %. The frequency model in this testbench is
synthetic.
The testbench shuffles all 32 locations. It does not model the separate
ratio that decides how many frequencies are assigned to the groups at
random rather than in order (κ, studied with the NIST tests): that choice
is made off-chip and only changes which numbers land in the slot arrays.

## Choices made here that the source description leaves open

* Challenge split: low bits go to the upper group. Which count is
  subtracted: R = 0 when the upper group is at least as fast.
* Counter width (16), saturation, asynchronous clear, and reading the
  counts only after the rings stop.
* The controller's clear and settle phases, the start/busy/done handshake,
  and the 100 MHz clock behind the 12287-cycle window.
* LFSR form (Fibonacci, XOR), the polynomials, and the handling of a zero
  seed.
* The latch after the ring is modelled as holding the level while disabled.
* The default slot frequencies are an example, not data.

Not included: the characterization design with its UART/AXI readout and the
Zynq processing system, the enrollment software, and any
post-processing of the response. None of these is part of the PUF itself.
