# QPSK BB84 link MODEM: synthesizable RTL

Quantum key distribution (QKD) with the BB84 protocol needs two things from
its electronics. The random choices of both parties must be fast enough that
they never hold back the optics. Those choices must also be recorded, so the
two parties can compare bases afterwards over an ordinary network. In the
QPSK variant of BB84 implemented here, Alice sends each weak key pulse with
one of four optical phases. A strong, unmodulated reference pulse in the same
fiber goes with it. Bob applies one of two phases in a similar delayed
interferometer and detects the beat between key and reference pulse with two
gated avalanche photon counters (APDs). Only one fiber is needed, and the
phase and polarisation stability requirements are relaxed.

This RTL covers the digital part of that link, the *MODEM*: one FPGA on each
side. Each MODEM:

* generates random bits at one bit per clock (200 Mbit/s at 200 MHz), using a
  delay-line metastability source that seeds a pseudo-random generator;
* divides the clock into pulse slots at the optical repetition rate (1 MHz,
  so 200 clocks per slot);
* drives the phase modulator(s) with that slot's random choice;
* on Bob's side, captures the detector clicks;
* writes one record per slot (Alice) or per clicked slot (Bob) into a burst
  buffer. The host reads that buffer to do the base exchange.

The optics (laser, modulators, interferometers, fiber, APDs), the hosts and
their USB/Ethernet links are not logic and are not included. Where they
would connect, the top module has ports.

## The phase plan

Phases are given in units of π/4. The package `qkd_pkg` holds them as 3-bit
integers modulo 8 (`alice_phase`, `bob_phase`), so a phase difference of 0 is
0 and a difference of π is 4.

| Alice's base | key bit | optical phase Φ_A | `phi2` (base) | `phi1` (bit) |
|---|---|---|---|---|
| base 1 | 0 | +π/4  | 0 | 0 |
| base 2 | 0 | −π/4  | 1 | 0 |
| base 1 | 1 | −3π/4 | 0 | 1 |
| base 2 | 1 | +3π/4 | 1 | 1 |

Bob applies Φ_B = +π/4 for base 1 and −π/4 for base 2 (`phi3` = 0 or 1).

Detector 1 clicks when Φ_A − Φ_B = 0, and detector 2 when it is π. When the
difference is ±π/2, the photon goes to either detector at random. So when the
bases match, detector 1 means bit 0 and detector 2 means bit 1. When they do
not match, the click is noise, and sifting removes it.

The four phases factor neatly. The base sets ±π/4 and the bit adds 0 or π. So
the two electrodes of Alice's Mach-Zehnder modulator are driven by two
independent single-bit signals: `phi1` carries the bit and `phi2` the base.
This mapping of electrodes to bits is a choice made in this design. The
source fixes only the four phases and says that the two-electrode modulator
lets base and symbol be chosen independently. The drive levels that turn a
logic level into a phase shift belong to the analog buffers, which are
outside this RTL.

## The random bit generator

This is the least conventional part of the design (`trng`, made of
`delay_line_sampler`, `meta_select` and `lfsr_combiner`).

**Entropy source.** The global clock is sent down a chain of short routing
segments, each about Δ = 25 ps long. Every segment output is sampled by a
flip-flop clocked by the same global clock. A tap whose delayed edge is far
from the sampling edge always reads the same value. The one tap whose delayed
edge falls within the clock jitter of the sampling edge goes metastable, and
its value changes at random from cycle to cycle. For the default 5 ns clock,
128 taps (3.2 ns) always span more than half a period, so at least one edge
lies in the line.

Such a line has to be placed by hand for one FPGA family, so
`delay_line_sampler` is a **behavioural model**, not synthesizable RTL. It
computes, for tap *i*, the edge position `OFFSET_PS + 25·i` ps. Each cycle it
adds a common clock jitter (uniform ±20 ps) and a per-flip-flop noise
(uniform ±4 ps), and returns 1 when the result lies in the high half of the
clock period. With the default offset of 1200 ps, tap 52 sits exactly on the
edge. Bob's model uses 1325 ps, which puts tap 47 on the edge and stands in
for a different placement. To build the MODEM for a real FPGA, replace this
one module with the placed delay line. It has the same ports: `clk` in,
`taps` out.

**Selecting the most metastable flip-flop.** The design needs the single
flip-flop with the highest metastability. `meta_select` measures this as
balance. For `WINDOW` = 1024 clocks it counts, in parallel, how often each
tap read 1. It then scans the counters one per clock and keeps the tap whose
count is closest to `WINDOW/2`. A constant tap scores `WINDOW/2` away; the
metastable tap scores close to zero. The new selection is loaded, `reselect`
pulses, the counters clear, and the next round begins. A round takes
`WINDOW + N_TAPS` = 1152 clocks. The selection therefore follows slow drift
in temperature or voltage. Until the first round ends, `sel_valid` is low.

**Composed LFSRs.** The selected bit seeds a pseudo-random generator built
from three maximal-length Fibonacci LFSRs:

* 31 bits, x³¹+x²⁸+1;
* 29 bits, x²⁹+x²⁷+1;
* 23 bits, x²³+x¹⁸+1.

Their outputs are XORed. Seeding is continuous: while `sel_valid` is high,
the metastable bit is XORed into the feedback of all three registers every
clock, so fresh entropy keeps entering the state. Before the first
selection the generator runs unseeded from fixed reset values. Alice and Bob
use different reset values.

**Output.** The generator's output is the LFSR bit XORed with the metastable
bit, registered: one bit per clock. The block diagram this follows joins the
two paths at the output but does not name the gate; XOR is this design's
choice. Because of the continuous reseeding, the LFSRs add whitening. They
are not the only source of unpredictability.

## Pulse slots and synchronisation

`slot_timer` counts `PERIOD` = 200 clocks per slot. It gives:

* `phase`, the clock within the slot;
* `tick`, high for the first clock of each slot;
* `slot`, a 32-bit slot number counted from reset.

A pulse on `sync` ends the current slot early, and a new slot starts on the
next clock. Use it to align the slot boundary with the pulse source trigger.
The slot number still increments on a sync, so Alice's and Bob's numbering
stay in step when both see the same sync. The slot number is the key under
which the hosts later compare bases. The source only says that bit-level
synchronisation is done in the electronics; the divider, the numbering and
the sync input are this design's own.

## Alice's side

On every `tick`, `alice_encoder` takes the two random bits of the previous
two clocks: the older bit is the base, the newer one the key bit. On the next
clock it sets `phi1`/`phi2`, which then hold for the whole slot. On that same
clock it emits a record. Alice records every slot.

## Bob's side

On every `tick`, `bob_decoder` takes one random bit as Bob's base and drives
`phi3` with it from the next clock on. The APD outputs `det1`/`det2` are
asynchronous pulses. Each goes through a two-flop synchroniser and is latched
if it is seen in the detection window, clocks `WIN_START`..`WIN_END` (8..196)
of the slot. At `WIN_END`, a slot with at least one click produces a record:

* the key bit is the detector-2 flag;
* the `clicks` field keeps both flags, so that a double click (`2'b11`) can
  be thrown away by the host.

Slots with no click are not recorded. At about 0.1 photon per pulse, most
slots have no click.

Pulses must be at least one clock wide to be seen reliably. The window
should be placed around the gate of the photon counters. The defaults simply
leave a margin at each end of the slot.

## Records and the burst buffer

```
qkd_rec_t (36 bits, packed, MSB first)
  slot[31:0]   slot number since reset
  base         0 = base 1, 1 = base 2
  key_bit      Alice: sent bit; Bob: detector-2 flag
  clicks[1:0]  {detector 2, detector 1}; 0 on Alice's side
```

Records arrive at the quantum rate. The host reads them in bursts and is
much faster, but it is not always ready. `record_fifo` has 1024 entries. At
the default rates that is 1.02 ms of Alice's slots, or far longer of Bob's.
Its read port is first-word-fall-through: `rd_data` is valid whenever
`rd_valid` is high, and it pops on `rd_valid && rd_ready`. `rd_count` gives
the fill level.

The optics cannot be stalled, so a record that arrives while the buffer is
full is dropped. Each drop increments `drop_count`, a saturating 16-bit
counter, and sets the sticky `overflow` flag until `clr_overflow`. Because
records carry slot numbers, the host only loses those slots; it never
misaligns the key. At the default rates, Alice produces 36 Mbit/s of
records, which fits in a 100 Mbit/s network link.

## Hierarchy and interfaces

```
qkd_link                      top: both MODEMs, separate clocks and resets
├── alice_modem
│   ├── trng
│   │   ├── delay_line_sampler   (behavioural model)
│   │   ├── meta_select
│   │   └── lfsr_combiner
│   ├── slot_timer
│   ├── alice_encoder
│   └── record_fifo
└── bob_modem
    ├── trng (…as above, other offset and LFSR seeds)
    ├── slot_timer
    ├── bob_decoder
    └── record_fifo
```

All flip-flops use an asynchronous active-low reset (`rst_n`), except the
FIFO storage and the delay-line model. Each file opens with a comment giving
its ports and cycle timing. The two MODEMs in `qkd_link` share nothing: each
has its own clock, reset and sync. In the real system they are two boards
11 km apart.

Latencies, counted from the clock where `tick` is high:

| event | clocks after tick |
|---|---|
| `phi1`/`phi2`/`phi3` change | 1 |
| Alice record readable at an empty buffer | 2 |
| Bob record readable | 2 after `phase == WIN_END` |
| detector pulse counted (after its synchroniser) | 2 clocks after the pulse rises |

## Parameters

| parameter | default | origin |
|---|---|---|
| clock | 200 MHz | the FPGA limit given for the electronics |
| `PERIOD` | 200 clocks | 200 MHz / 1 MHz pulse repetition rate |
| `DELTA_PS` | 25 ps | delay-line segment |
| `PERIOD_PS` | 5000 ps | 200 MHz |
| `N_TAPS` | 128 | own choice: the line must span half a period |
| `OFFSET_PS` | 1200 (Alice), 1325 (Bob) | own choice, model only |
| `JITTER_PS` / `NOISE_PS` | 20 / 4 ps | own choice, model only |
| `WINDOW` | 1024 clocks | own choice |
| LFSRs | 31/29/23 bits | own choice |
| `WIN_START`/`WIN_END` | 8 / 196 | own choice |
| `FIFO_DEPTH` | 1024 records | own choice |
| `SLOT_W` | 32 | own choice |

## How far it follows the source, and where it departs

Taken from the source:

* the four Alice phases and two Bob phases;
* the detector rule;
* the two modulator drives on Alice's side and one on Bob's, plus two
  detector inputs (two and three GPIOs);
* 200 MHz / 200 Mbit/s random generation;
* the 1 MHz repetition rate;
* the structure of the random generator: a 25 ps delay line sampled by
  flip-flops, selection of the most metastable flip-flop, composed LFSRs
  seeded by it, and the two paths joined at the output;
* the need for a buffer that sustains bursty reads from the network side.

Chosen here, because the source does not specify them:

* how metastability is measured (balance over a window);
* the number of taps;
* the LFSR polynomials and the way seeding works;
* the XOR at the output;
* which electrode carries which bit;
* the slot divider, slot numbering and sync;
* the detection window and synchronisers;
* the record format;
* the FIFO depth and its drop-on-full policy;
* the reset style.

The source mentions a random rate *higher* than 200 Mbit/s, while also
giving 200 MHz as the FPGA's maximum frequency. This design produces exactly
one bit per clock.

Not included:

* the MODEM's microcontroller and its USB link. Their interface to the FPGA
  is not described, and the record read port stands in for it.
* any feedback loop for the optical phase drift, which is done optically.
* sifting, error estimation and privacy amplification, which are host
  software. The end-to-end testbench does the sifting itself.
* a mode that holds a constant key bit, as used for the detector-histogram
  measurement. The MODEM always sends random choices.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_delay_line_sampler`: each tap is always 0, always 1 or random, as
  predicted from the edge geometry.
* `tb_meta_select`: a synthetic word with one random tap, one biased tap and
  the rest constant. It checks that the random tap is selected, that the
  selection moves when that tap moves, that a round takes `WINDOW+N_TAPS`
  clocks, and that `meta_bit` follows the selected tap with one clock of
  latency.
* `tb_lfsr_combiner`: bit-exact against a bit-array reference with random
  seeding.
* `tb_trng`: the full 128-tap generator. Tap 52 is selected; before the
  first selection the output is bit-exact with the unseeded LFSRs; after it,
  the output departs from them. It also checks the balance and transition
  rate over 20,000 bits and the reselection period.
* `tb_slot_timer`, `tb_alice_encoder`, `tb_bob_decoder`, `tb_record_fifo`:
  timing, phases, detection window edges, double clicks, and FIFO order,
  overflow and drop count.
* `tb_alice_modem`, `tb_bob_modem`: each MODEM at a short slot length.
  Bob's testbench plays Alice and the optical channel.
* `tb_qkd_link`: the whole link with **all default parameters**. It runs
  4000 slots (0.8 M clocks, a few seconds). Bob's clock is phase-shifted
  from Alice's.

  The channel model sends a photon with probability 1/10 and decides the
  detector by the phase difference. It also adds false clicks with
  probability 1/50.

  The testbench acts as both hosts: it pops both buffers, stalls Alice's host
  long enough to overflow her buffer, and applies one sync in the middle of
  the run. It checks every record against what the channel saw. After
  sifting, it checks that Bob's key equals Alice's wherever no false click
  occurred. Every mechanism must occur at least once: reselection, sync,
  overflow, matching and mismatching bases, both detectors, and false and
  double clicks.

* `tb_qkd_link_4mbps`: the same end-to-end run with 50-clock slots, i.e. 4
  MHz, the rate at which the photon counters limit the optics. Only
  `PERIOD`, `WIN_START` and `WIN_END` change. At this rate Alice's records
  amount to 144 Mbit/s, more than a 100 Mbit/s network can carry, so her host
  would have to thin them before the base exchange.

Run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/qkd_pkg.sv tb/tb_qkd_link.sv \
          --top-module tb_qkd_link -o sim
./obj_dir/sim
```

Any other testbench runs the same way, with its own name. The testbenches
only use `$urandom`, so they work on two-state simulators.

What this testing does *not* show:

* The entropy of a real delay line. The model's jitter is invented, and the
  generator's quality on silicon depends on placement.
* Timing closure at 200 MHz. The 128 parallel counters of `meta_select` and
  the scan multiplexer are simple, but they have not been through an FPGA
  flow.
