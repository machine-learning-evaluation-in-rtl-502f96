# Machine-learning trigger algorithms in an Algorithm Processing Platform

The ATLAS Level-0 trigger gives each Global Event Processor (GEP) FPGA one
bunch crossing every 1.2 µs: 48 GEP boards take the 25 ns crossings in turn.
Inside a GEP the trigger computation is cut into Algorithm Processing Units
(APUs). Each APU sits in an Algorithm Processing Platform (APP). The APP
buffers the APU's input events in dual-clock block-RAM banks. That buffering
absorbs two things: producers that run on their own clocks, and inputs of the
same crossing that arrive with skew.

Machine-learning cores made by tools such as hls4ml (neural networks) and fwX
(boosted decision trees) do not fit this frame as they are. They take a
stream of features, while an APP offers addressable buffers. A small
algorithmic state machine (ASM) bridges the two. It reads an event out of the
input BRAM and streams it into the model. It then writes the model's result
back as an event in the next buffer.

This RTL builds that whole path: dual-clock BRAM banks, synchronization
registers, the sync controller, the ASM, and four ML cores. The cores are
sized like the four models evaluated for the GEP:

| model | kind | size | clock | latency (clocks) |
|---|---|---|---|---|
| B-tagging | dense network | 16 → 32 → 32 → 5, softmax | 200 MHz | 10 |
| VBF Higgs vs multijet | BDT classifier | 10 trees, depth 4, 5 features | 320 MHz | 7 |
| missing-E<sub>T</sub> | BDT regression | 40 trees, depth 6, 8 features | 320 MHz | 11 |
| quark/gluon | CNN on a 15×15 jet image | 4 filters 2×2, 2×2 max-pool, softmax | 200 MHz | 233 |

The trained weights are not part of the design. Every core takes its weights,
tree cuts and leaf values through a configuration write port.

## Structure

```
             up_clk[s] domain        |            APP clock domain                 | consumer domain
                                     |                                             |
 source s ──► bram_bank (NSLOT BRAMs) ──rd──►  ┌──────────── apu ────────────┐      |
   wr_en/addr/data, commit           |        │ ml_asm ──stream──► ML core  │      |
              sync_register ──ready──► sync_controller ◄── event_done        │      |
                    ◄──release───────┤        │ ml_asm ◄──result── ML core  │      |
                                     |        └──────────┬──────────────────┘      |
                                     |                   │ dn_wr / dn_commit        |
                                     |                   ▼                          |
                                     |  bram_bank + sync_register (result bank) ──► out_rd / out_release
```

`gep_ml_top` holds four APPs, one per model, and each APP's result bank:

| APP | model | input sources | APP clock |
|---|---|---|---|
| 0 | `dnn_btag` | 0 and 1 (8 features each) | `clk_nn` |
| 1 | `bdt_engine` as VBF | 2 | `clk_bdt` |
| 2 | `bdt_engine` as MET | 3 | `clk_bdt` |
| 3 | `cnn_qg` | 4 | `clk_nn` |

Module hierarchy:
`gep_ml_top` → `app` → (`sync_register`, `bram_bank` → `bram_dp`, `sync_controller`, `apu` → (`ml_asm`, one of `dnn_btag` / `bdt_engine` / `cnn_qg`)).
`dnn_btag` uses `dense_layer` and `softmax_unit`, and `cnn_qg` uses `softmax_unit`.
`sync_register` uses `sync_2ff`. The shared types and constants live in `gep_pkg`.

## Events and buffers

Every buffer word is 16 bits. An event occupies one BRAM of a bank:

| address | content |
|---|---|
| 0 | index of the last valid word, N |
| 1 … N | payload |

The ASM writes its results in the same layout: N = number of outputs (5, 1, 1
or 2), results at 1 … N. A downstream APU could read them the same way.

A producer writes an event like this:

1. Wait while `up_full` is high.
2. Write the payload and the header at any addresses, in any order, with
   `up_wr_en`, `up_wr_addr` and `up_wr_data`.
3. Pulse `up_commit`. It may share a cycle with the last write.

The bank picks the BRAM. The producer only gives word addresses. The consumer
of a result bank does the reverse. It waits for `out_ready`, reads with
`out_rd_addr` (data come one `out_clk` cycle later), and pulses `out_release`.

Bank size is `NSLOT` = 4 events × `DEPTH` = 256 words. That covers the largest
event here: a header plus 225 pixels.

## Crossing clocks and aligning skewed sources

This is the part that needs the most care.

**Synchronization register (`sync_register`).** Each source has one. It works
like the pointer logic of an asynchronous FIFO whose entries are whole BRAMs:

- The write pointer counts committed events, in the producer's clock domain.
- The read pointer counts released events, in the APU's clock domain.
- Both pointers are one bit wider than the slot number. Each crosses to the
  other domain in Gray code through two flip-flops.
- The low bits of each pointer are the BRAM being written (`wr_slot`) or
  read (`rd_slot`).

The flags are conservative. `rd_ready` (the oldest slot holds a complete
event) and `wr_full` (no free slot) can lag by two or three cycles of the
other clock. They never grant a slot too early. The data themselves never
pass through a synchronizer: they sit in the BRAM. By the time the
synchronized pointer shows the event, the BRAM contents are stable.

**Sync controller (`sync_controller`).** It has three states:

- IDLE: wait until every source's SR is ready and the downstream bank is not
  full.
- RUN: hold `event_ready` until the APU pulses `event_done`.
- RELEASE: pulse `src_release`, so every source frees its BRAM.

Each source delivers its events in order, so the oldest slot of every source
belongs to the same crossing. Waiting for all sources is therefore enough to
pair up inputs that arrive with skew. No event number is carried. The status
output `stall_skew` shows the wait for a late source, and `stall_full` the
wait for room downstream.

Resets are active low and asynchronous, one per clock domain. Release them
together (the testbenches do) so the pointers start equal.

## The ASM (`ml_asm`)

The ASM has two machines that run side by side.

*Read machine.* The steps are:

1. On `event_ready`, read address 0 of every source. The words come back one
   cycle after the address, so each header costs 2 cycles.
2. Stream addresses 1 … N of each non-empty source, in source order. One word
   reaches the core per clock. `nn_in_last` marks the last word.
3. If every source is empty, send nothing. Only a header of 0 is written.

Reading all headers first means the last word is known even when a later
source is empty.

*Write machine.* The steps are:

1. On the core's `nn_out_valid`, capture the N_OUT results.
2. Write them to addresses 1 … N_OUT, one per clock.
3. Write N_OUT to address 0 with `dn_commit`, and pulse `event_done`.

Cycle budget, with cycle 0 being the first cycle `event_ready` is high:

| step | cycle |
|---|---|
| first payload word | 2·N_SRC + 3 |
| between sources | 2 idle cycles |
| result valid (X) | last word + model latency (CNN: first word + 233) |
| `event_done` | X + N_OUT + 1 |
| next `event_ready`, if inputs are waiting | X + N_OUT + 4 |

Per-event occupancy of each APP follows from that:

| APP | cycles per event | time |
|---|---|---|
| DNN | 43 | 215 ns at 200 MHz |
| VBF | 21 | 66 ns at 320 MHz |
| MET | 28 | 88 ns at 320 MHz |
| CNN | 244 | 1.22 µs at 200 MHz |

The CNN figure is the one to watch. An APU works on one event at a time, so
the CNN APP takes 1.22 µs per event. That is slightly more than the 1.2 µs
between the events a GEP receives. The core could accept a new image every
225 cycles. The one-event-at-a-time APU and the 19-cycle ASM overhead cost
the rest. A design that must keep up would let the read machine start the
next event while the current one is still in the core.

## The model cores

All cores share one interface:

- input stream: `in_valid`, `in_last`, 16-bit `in_data`;
- result: `out_valid` for one cycle, with `out_data[N_OUT]`;
- weight load: `cfg_we`, `cfg_addr`, `cfg_data`.

Each core can take a new event in the cycle after `in_last`. Latencies count
from the cycle in which `in_last` is presented. For the CNN they count from
the first pixel.

**Number formats.**

- Neural-network values: signed Q6.10 (16 bits, 10 fraction bits).
- Probabilities: Q2.14, so 1.0 = 16384.
- BDT features: 12-bit unsigned codes. The VBF m<sub>jj</sub> has only 7 bits
  and is zero-extended.
- BDT scores: signed 16 bits, saturated.

**`dnn_btag`.** It has three `dense_layer` stages, 16×32, 32×32 and 32×5,
with ReLU on the hidden layers. All multipliers work in parallel. Each layer
registers its products, then its sums, so each layer takes 2 cycles. Then
comes `softmax_unit`, which takes 4 cycles. The total is 10 cycles. Sums are
rescaled to Q6.10 and saturated. Configuration map:

| weights | address |
|---|---|
| W1[j][i] | j·16+i |
| b1[j] | 512+j |
| W2[j][i] | 544+j·32+i |
| b2[j] | 1568+j |
| W3[j][i] | 1600+j·32+i |
| b3[j] | 1760+j |

**`softmax_unit`.** It has 4 stages:

1. Take the maximum m of the logits.
2. Compute exp(z−m) as 2<sup>−y</sup>, with y = (m−z)·log₂e. The integer part
   of y is a shift. The fraction f uses the chord 1 − f/2.
3. Sum the exponentials.
4. Divide each exponential by the sum.

The error is below 6 % of each probability. The order of the classes is
kept.

**`bdt_engine`.** All trees walk in parallel, one level per clock. Each tree
is a full binary tree in heap order: node k has children 2k and 2k+1. A node
word is {feature[15:12], threshold[11:0]}, and the walk goes right when
x[feature] > threshold. The leaves reached are summed. Output registers then
pad the DEPTH+1 stages to the latency parameter: 7 for VBF, 11 for MET.
Configuration address: tree·2<sup>DEPTH+1</sup> + k. Nodes are at
k = 1 … 2<sup>DEPTH</sup>−1. Leaf l is at k = 2<sup>DEPTH</sup>+l.

**`cnn_qg`.** The image is never stored. Pixels arrive in row-major order.
Each pixel is read as p/256. Stage by stage:

1. A one-row line buffer and the previous pixel complete a 2×2 window with
   each new pixel. Four filters, with bias and ReLU, give one result per
   filter per clock.
2. A row of 7 running maxima per filter forms the 2×2 max-pool.
3. Each finished pooled value (7×7×4 = 196 in all) is multiplied by its
   dense weights for both classes.
4. The products are added into two accumulators.
5. The bias is added.

The 4-stage softmax follows. The last pixel comes 224 cycles after the first
and is followed by 9 stages, so the result comes 233 cycles after the first
pixel. Configuration map:

| weights | address |
|---|---|
| conv weight (f, tap) | f·4+tap; taps are upper-left, upper-right, lower-left, lower-right |
| conv bias f | 16+f |
| dense weight (o, (row·7+col)·4+f) | 20+o·196+((row·7+col)·4+f) |
| dense bias o | 412+o |

## What follows the published design and what is chosen here

Taken from the published description:

- The APP made of dual-clock BRAM banks, synchronization registers, a sync
  controller with an FSM, and the APU.
- Banks that hold several events.
- One event at a time per APU.
- The ASM's read and write machines, including the first-word header and the
  final write of the last-data index with `event_done`.
- The model sizes, the CNN's image size and pixel scaling, and the model
  latencies and clocks.

Chosen here, where the description is silent or unclear:

- **Word width and formats.** 16 bits throughout.
- **Bank size.** 4 events × 256 words.
- **Handshakes.** The commit/release and ready/full protocol, the Gray-pointer
  crossing, and the reset scheme.
- **Aligning sources.** Sources are paired by delivery order. No crossing
  number is carried.
- **Header versus loop.** The published ASM reads address 0 as the header
  but loops over addresses 0 … N−1. Here the payload is at 1 … N.
- **Write loop.** It covers the model's outputs, not the input count.
- **Several sources.** Sources are read one after the other. This is only
  used by the DNN APP in the top, which takes 8 features from each of two
  sources.
- **Network layers.** The B-tagging network is read as 16 inputs with layers
  of 32, 32 and 5, as its architecture drawing shows. (Its text can be read
  as a 16-neuron first layer.)
- **Hidden activations.** ReLU.
- **CNN dense part.** A single dense layer of 196 → 2. Only "final fully
  connected layers" are mentioned.
- **Exponential.** The softmax uses the approximation above. hls4ml would use
  a lookup table.
- **Trees.** BDTs are full binary trees with a "greater than goes right"
  rule and 16-bit leaves.
- **Latency padding.** The BDT outputs are padded to the reported latencies.
- **Weight storage.** All weights and trees sit in flip-flops behind a
  configuration port. The generated cores would hold them as constants or in
  BRAM, and the DNN would share its 625 DSPs instead of using 1696
  multipliers in parallel. Resource use is therefore not comparable with the
  published tables.

Not built:

- The rest of the GEP dataflow graph: other APUs, chaining from APP to APP,
  and fanout through parallel buffer copies.
- The distribution of crossings over 48 boards.
- The trained parameters.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The references are
computed inside the testbenches: the fixed-point forward passes, tree walks
and softmax formula, written independently of the RTL.

| testbench | what it exercises |
|---|---|
| `tb_bram_dp`, `tb_bram_bank` | dual-clock writes and reads, slot selection, read latency |
| `tb_sync_register` | ordering, no overwrite, full / ready across unrelated clocks |
| `tb_sync_controller` | start only when all sources are ready and there is room downstream, one release pulse |
| `tb_ml_asm` | header/payload streaming over two sources, empty sources, result layout |
| `tb_softmax_unit` | bit-exact reference, distance to the true softmax, 4-cycle latency |
| `tb_dnn_btag`, `tb_bdt_engine`, `tb_cnn_qg` | bit-exact outputs against reference models, latencies 10 / 7 and 11 / 233 |
| `tb_apu` | VBF APU, 18-cycle event |
| `tb_app` | two skewed sources on their own clocks, full banks, downstream stalls |
| `tb_gep_ml_top` | all four APPs at default sizes, 5 clocks plus the consumer clock; checks every result and counts skew stalls, downstream-full stalls and full input banks |

Run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/gep_pkg.sv tb/tb_gep_ml_top.sv --top-module tb_gep_ml_top
./obj_dir/Vtb_gep_ml_top
```

Replace `tb_gep_ml_top` with any other testbench name. `-y` lets Verilator
find the other modules by file name. The package must be listed first.
`-Wno-fatal` keeps the remaining width and unused-bit lint warnings from
stopping the build. The full-system test builds and runs in under a minute
at the default sizes. It also measures the shortest spacing between events of
each APP and checks it against the cycle budget above (43 / 21 / 28 / 244
cycles). The RTL uses only two-state constructs, and everything
that is read is reset.
