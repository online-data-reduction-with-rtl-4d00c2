# Spiking-neural-network data reduction for the dRICH detector

The dRICH Cherenkov detector reads ~320 000 SiPM channels through 1248
photo-detection units (PDUs). The crossings run at 100 MHz. Late in the detector's life, SiPM dark counts
(up to 300 kHz per channel) fill most bunch crossings (BCs) with random hits, and the
raw data no longer fits the egress links. Real Cherenkov photons of one ring land
within about 2 ns of each other, while dark counts are spread evenly over the
~10 ns crossing. So whether a BC holds a ring is a question of *timing
coincidence*.

This RTL implements a two-stage online filter built on that idea:

1. **Encoder (one per PDU).** A tiny leaky-integrate-and-fire (LIF) neuron with a
   1-bit membrane sees the PDU's hits in time order. It fires at most once per BC,
   when two hits fall in the same 1.27 ns time bin. Isolated dark counts
   leak away, so more than 90 % of the data never becomes a spike.
2. **Distributed classifier.** Each of the 30 DAM boards runs a small sub-sector
   SNN (42 → 16 → 4 LIF neurons) on the spikes of its 42 PDUs. A Trigger
   Processor (TP) runs an aggregation SNN (120 → 120 → 2) on the 30 × 4 features
   and returns one verdict per BC: *Signal+Noise* or *Noise-Only*. Each DAM buffers
   the raw readout of every BC until that verdict arrives. It then forwards the
   readout to its 100 GbE egress or throws it away.

Everything is written in synthesizable SystemVerilog with the shipped
parameters as defaults (30 DAMs × 42 PDUs, 120 aggregation neurons, 10
timesteps, 512-bit raw words).

## Block map

```
drich_snn_top
├── dam_node            ×30   one DAM board
│   ├── dam_subsector          encoders + sub-sector SNN
│   │   ├── pdu_encoder   ×42  per-PDU LIF coincidence encoder
│   │   │   └── lif_encoder_cascade   4 combinational LIF stages
│   │   ├── aer_serializer     min-tree merge onto one AER bus, late-spike drop
│   │   ├── aer_adapter        inserts timestep SYNC words
│   │   ├── aigor_router       4-port AER router (static routes)
│   │   └── aigor_lif_core ×2  42→16 and 16→4 LIF layers
│   └── rdo_event_buffer       raw-data FIFO + forward/flush FSM
└── trigger_processor          TP board
    ├── tp_feature_merger      30 links → one 120-id AER stream
    ├── aigor_lif_core ×2      120→120 and 120→2 LIF layers
    └── early_exit_decision    verdict with early exit
```

`drich_snn_pkg` holds the shared types. `tb/tb_ref_pkg.sv` holds the reference
models used by the testbenches.

## The AER word

All spike traffic uses one 14-bit word (`aer_word_t`):

| field  | bits | meaning |
|--------|------|---------|
| `kind` | 2    | `AER_SPIKE`, `AER_SYNC` (timestep ends) or `AER_EOE` (end of BC) |
| `ts`   | 4    | timestep: the encoder time bin (0..7); SYNCs run 0..T_MAX-1 |
| `nid`  | 8    | neuron id of the sender in its layer |

Every link is a valid/ready stream. A sender holds its word stable while `valid && !ready`;
assertions in the cores and serializer check this. Timestep t of a BC is
exactly the words between SYNC(t-1) and SYNC(t). Every BC ends with T_MAX SYNCs and then
one EOE, so all downstream units can align without a global clock of timesteps.

## The encoder: one clock cycle per word of four hits

A PDU's readout delivers *words* of up to four hits (`pdu_word_t`). Each hit
has a valid bit and a 3-bit bin. One BC is 8 bins of 1.27 ns. The last word of a PDU's BC carries
`last = 1`; a word with no valid hits and `last = 1` reports an empty PDU.

`lif_encoder_cascade` unrolls the LIF update over the four hits as four
combinational stages. Stage k:

* is active only if no earlier stage fired and the PDU has not fired yet this BC
  (`act0 = !idle`, `act_k = act_{k-1} & !spk_{k-1}`);
* leaks the membrane by the bin distance to the previous hit,
  `v >> (LEAK_K · (bin − t_ref))`;
* adds the unit input weight and fires when the sum reaches `THETA`.

With the shipped point (1-bit membrane, θ = 2, shift-by-one leak), the membrane
survives only inside the same bin. The stage therefore fires exactly when it
sees the second hit of a bin. The first firing stage wins, and its bin becomes
the spike time. A parallel tracker gives the latest valid bin of the word. The
next word's leak is measured from that bin.

`pdu_encoder` registers the state (membrane, time reference, idle) between words. It holds the
single spike until the serializer takes it. After the `last` word it reports
`done` and stops accepting input until the BC is closed.

*The threshold condition.* The paper's equations say "fire when V > θ". Its text says
the θ = 2 point fires on "two or more hits in one bin". A 1-bit membrane
can never exceed 2, so this design uses `≥`. The membrane width, leak and threshold are
parameters, so the general multi-bit encoder can be built too.

## Serializing the spikes: the watermark

`aer_serializer` merges the 42 pending spikes onto one AER bus in non-decreasing
bin order, one spike per cycle. A binary min-tree over (bin, PDU index) picks the
earliest pending spike. It does not wait for all PDUs. Once a spike of bin b has gone out, the
*watermark* is b. A spike that appears later with a smaller bin would break the time
order, so it is dropped in the cycle it shows up (`drop_o`). When all 42 PDUs
are `done` and nothing is pending, it sends EOE and closes the BC for every
encoder. A BC with s spikes costs s + 1 cycles on the bus.

How often spikes are dropped depends only on how far apart the PDU streams arrive. With
aligned streams there are no drops. The end-to-end test has deliberately
slow PDUs to make drops happen.

`aer_adapter` turns the bin-stamped spikes into timestep traffic. Before a spike
of bin b it emits the missing SYNCs up to b − 1. At EOE it emits the remaining SYNCs up
to T_MAX − 1 and then passes the EOE on. With 8 bins and T_MAX = 10, timesteps 8
and 9 carry no input. They let the deeper layers settle.

## The LIF cores

`aigor_lif_core` is one fully connected LIF layer of N_OUT neurons in signed
Q12.20 fixed point (32 bits). It works per timestep:

* **SPIKE**: add the weight row of that input to every neuron's current
  accumulator. This is one cycle per input spike, with all neurons in parallel.
* **SYNC**: for every neuron, `v ← v − (v >>> LEAK_K) + I` (leak α = 1 − 2^−LEAK_K);
  a neuron with `v > θ` fires and is reset to 0; the current accumulators are cleared.
  The core then sends one SPIKE word per fired neuron (round-robin order, one per cycle),
  followed by its own SYNC.
* **EOE**: clear all membranes and pass the EOE on.

All sums saturate at the 32-bit limits. Weights are written through a simple port
(`cfg_we/row/col/data`). The core takes no input while it emits. Its input ready
does not depend on the output ready, so the chained cores have no combinational
loop.

The paper does not give the leak factor, the threshold or the weight format of
the deployed network. This design assumes θ = 1.0, LEAK_K = 2 and Q12.20. All
three are parameters.

## The DAM sub-sector: router wiring

`dam_subsector` copies the single-core-per-layer layout of the paper's
test setup. A 4-port `aigor_router` has the adapter on port 0, core 0 on port 1,
core 1 on port 2 and the feature output on port 3. The static routes are 0→1, 1→2
and 2→3, and words that arrive on port 3 are discarded. Each router output picks
among its inputs round-robin. The four features leave as AER words towards the
TP.

## Raw-data buffer and verdict handling

`rdo_event_buffer` keeps the raw 512-bit readout words of each BC in a FIFO
(depth 1024). A `last` bit marks the end of each BC. Verdicts arrive in BC order into a
16-entry queue. A three-state FSM takes the oldest verdict. On Signal it
forwards that BC's words to the egress with backpressure. On Noise-Only it flushes
them at one word per cycle. It pulses `fwd_bc_o` or `flush_bc_o` once per BC. If a verdict
arrives while the queue is full, it is lost, and the sticky `dec_overflow_o` is set.
With the paper's latencies the queue should never fill.

## Trigger Processor and early exit

`tp_feature_merger` turns 30 feature links into one stream. It forwards spikes
round-robin and renames them to `link·4 + id`. It sends SYNC(t) only after every
link has delivered its own SYNC(t), and EOE only after every link's EOE. Two
`aigor_lif_core`s wired back to back run the 120 → 120 → 2 network.

`early_exit_decision` counts the output spikes per class: neuron 1 is Signal and
neuron 0 is Noise-Only. It tests the counts at every SYNC:

* with early exit on (`ee_en_i`), the first class whose count reaches `et_i`
  wins; Signal is tested first, so it wins a tie in the same step;
* otherwise, at the last timestep, a rate rule decides: Signal if
  `n_sig / (n_sig + n_noise) > 1/2`. A BC with no output spike is Noise-Only.

The verdict pulse carries the class, whether early exit decided it, and the
number of timesteps used. After an early verdict the BC still runs to its end.
The unit ignores the rest of its spikes, so the verdict latency drops but the
compute does not stop early. The neuron-to-class mapping and the 1/2 ratio are
assumptions. The paper only says "a fixed ratio".

## Top level

`drich_snn_top` instantiates 30 `dam_node`s and the `trigger_processor`. The
verdict goes straight back to every DAM's buffer. In the real system it travels
over the timing network. The DAM→TP links are direct wires here; in the real
system they are optical APEIRON links. Ports:

* `word_*` [30][42]: PDU hit words. The readout merger that would split them out of
  the optical stream is not built.
* `rdo_*` / `eg_*` [30]: raw readout in, forwarded readout out (512 bits).
* `cfg_*`: weight writes. `cfg_node_i` selects DAM 0..29 or the TP (30), and
  `cfg_layer_i` selects the first or second core of that node.
* `et_i`, `ee_en_i`: early-exit settings. `verdict_*`: the verdict.
* per-DAM statistics pulses: spike sent, spike dropped, BC forwarded, BC
  flushed, verdict overflow.

## What is not here

The optical links and their IP, the global timing unit, the PDU front-end
electronics, the DAM's PDU-link merger and the 100 GbE MAC are outside
this RTL. They are external systems, or their behaviour is not specified. The
test-only spike recorder and the PDU traffic emulator of the lab setup are
replaced by testbench code. All logic runs on one clock, synchronously, with an active-low
asynchronous reset. The reference prototype ran at 100 MHz.

Throughput is far below one BC per clock, and this design does not try to
close that gap. Each LIF core spends at least two cycles per timestep: one to
take the SYNC and one to send its own. It also spends one cycle per input spike
and one per output spike. So a BC costs a core at least 2 × T_MAX = 20 cycles.
That gives a few MHz of BC rate at 100 MHz, the same order as the ~1.7 MHz
measured on the prototype's encoder + sub-sector chain. Reaching the 100 MHz
crossing rate would take multi-spike AER words, event-driven timesteps and
truncation after an early exit. None of these is built here.

Known simplifications:

* the encoder assumes the hits of one PDU come in non-decreasing bin order;
  a hit with a smaller bin is treated as being in the same bin;
* only the shift leak of the encoder is built, not the geometric variant;
* the early-exit verdict does not stop the rest of the inference;
* the 1248 PDUs are mapped onto 30 × 42 = 1260 encoder inputs, so 12 stay unused.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The reference models
in `tb/tb_ref_pkg.sv` are plain procedural code: an encoder evaluated hit by hit and
a saturating fixed-point LIF layer. To run one with verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/drich_snn_pkg.sv tb/tb_ref_pkg.sv tb/tb_dam_subsector.sv --top-module tb_dam_subsector
./obj_dir/Vtb_dam_subsector
```

`tb_drich_snn_top` runs the full-size system (30 × 42 PDUs, default
parameters) through 24 BCs in three phases:

1. early exit on, with output weights that favour Signal;
2. early exit off;
3. early exit on, with output weights that favour Noise.

It checks every DAM's spike count against the reference encoder. It checks
every verdict against a reference computed from the feature stream entering the TP, and
every egress word against the raw data of the Signal BCs. It fails if any
mechanism never happens: spikes, late drops, input stalls, feature spikes,
early Signal exits, early Noise exits, rate-coded verdicts, forwards, flushes and egress
backpressure. The build takes a few minutes and the run takes about a minute and a half.
A run sees about 9 700 encoder spikes and 50 late drops over the 30 DAMs. It has 8
early Signal exits, 8 early Noise exits and 8 rate-coded verdicts. Of the DAM
buffers' BCs, 480 are forwarded and 240 are flushed.

Weights in all tests are synthetic, set by a formula in `tb_ref_pkg`. No trained network
is included, so the tests check the arithmetic and the data flow, not the
classification quality.
