# Error-tolerant quantized neural network layer

Quantized neural networks (QNNs) are compact enough for FPGA dataflow
accelerators, but a single permanent fault in one processing element (PE)
can cost several percent of classification accuracy. In a convolutional
network one stuck neuron corrupts an entire output channel, and with
folding one PE computes several channels. This RTL implements one layer of
such an accelerator with three features that make it possible both to
measure that sensitivity and to reduce it:

* **Stuck-at injection through the thresholds.** Activations are produced
  by comparing the accumulated dot product with per-channel thresholds.
  Overwriting those thresholds at run time fixes a channel's output to any
  value, with no extra logic in the datapath.
* **Selective channel replication.** Only the channels whose failure costs
  the most accuracy are computed three times, and a majority vote masks one
  faulty copy. This costs much less than triplicating the whole layer.
* **Fault-aware scheduling.** Which channels share a PE is chosen to limit
  the worst case when that PE fails. In hardware this is only a question of
  where the weights and thresholds of each channel are placed.

The layer is written in synthesizable SystemVerilog (IEEE 1800-2017). By
default it is the first convolutional layer of a binarized CIFAR-10 CNN:
64 output channels, 32 PEs, 1-bit weights and 1-bit outputs.

## Datapath: the matrix-vector threshold unit

`mvtu` computes, for each output pixel, a matrix-vector product followed
by thresholding.

```
 in_data (SIMD words) ──► input buffer (SF words)
                              │  x
             weight_mem ──────┼──► mvtu_pe × PE ──► out_act (PE values per fold)
          threshold_mem ──────┘     (simd_dot → accumulator → thresholding)
```

* **`simd_dot`** multiplies SIMD weight/activation pairs and adds them.
  With 1-bit operands the product of two bipolar values is an XNOR.
* **`mvtu_pe`** accumulates SF = MATRIX_W/SIMD partial sums. At the last
  word it feeds the total to `thresholding` and registers the activation.
* **`thresholding`** outputs the number of thresholds that the sum
  exceeds. A 1-bit output uses one threshold. An a-bit output uses 2^a−2
  thresholds, and the count is shifted down to a symmetric value: for
  a = 2 the count 0, 1, 2 becomes −1, 0, +1. Biases and batch normalisation
  are assumed to be folded into the thresholds offline.

### Value encodings

| width | encoding | example |
|---|---|---|
| 1 bit | bipolar: 0 = −1, 1 = +1 | binarized weights and activations |
| ≥ 2 bits | two's complement, symmetric | ternary: 11 = −1, 00 = 0, 01 = +1 |

### Folding and slots

There are more output values than PEs, so each PE computes several of
them in turn. The unit works in NF *neuron folds*. In fold `nf`, PE `pe`
computes **slot** `nf*PE + pe`. With channel c in slot c this is the
classic schedule, where channel c runs on PE `c mod PE`.

Each slot has its own weights (SF words in `weight_mem`) and its own
thresholds (in `threshold_mem`). Both stores are written by the host, one
word per cycle. A slot can hold:

* a channel,
* a replica of a triplicated channel, or
* nothing.

The input vector arrives once, during fold 0. It is kept in an SF-word
buffer, and folds 1 … NF−1 read it from there.

### Timing

Without back-pressure:

* a fold's activations are valid one cycle after its last input word;
* the unit produces one complete output vector every NF·SF cycles.

The array advances only when its output register is free, so downstream
back-pressure stalls every PE at once. By default SIMD = MATRIX_W, so
SF = 1: each PE finishes one channel per cycle, and an output pixel takes
NF cycles. This is the folding factor, as in the published description of
folding. At the top level, the first
output appears NF·SF + 2 cycles after the first input word is accepted.

## Injecting stuck-at errors (`injection_ctrl`)

Let TH_MAX be a value larger than any accumulation that can occur.

* A threshold of +TH_MAX is never exceeded.
* A threshold of −TH_MAX is always exceeded.

Setting k of a channel's thresholds to −TH_MAX and the rest to +TH_MAX
therefore makes its output equal to the level with count k, whatever the
inputs are. For example, a ternary channel is stuck at:

* −1 when both thresholds are +TH_MAX;
* 0 when one threshold is −TH_MAX;
* +1 when both thresholds are −TH_MAX.

To make this possible, the threshold word is one bit wider than the
accumulator.

The injector accepts a command (`inj_mode`, `inj_target`, `inj_value`):

* `INJ_SLOT` overwrites the thresholds of one slot, i.e. one channel.
* `INJ_PE` overwrites the thresholds of slots `pe, pe+PE, pe+2·PE, …`.
  This is every channel the PE computes, which models a single faulty PE
  under the current schedule.

Writes go out one per cycle: NUM_TH for a slot, NF·NUM_TH for a PE. While
the injector is busy it owns the single threshold write port, and
`host_th_ready` is low. The injector keeps no copy of the old thresholds.
To remove a fault, the host writes the original thresholds back.

An injected value sets all a bits of an output at once, so for multi-bit
activations one injection is really several bit faults.

## Selective replication and the vote (`fold_collector`, `replica_voter`)

The replicas of a triplicated channel sit in slots of other PEs, and often
in another fold. The votes can only be taken once a whole output pixel has
been computed. `fold_collector` therefore assembles the NF folds into one
vector of PE·NF slot values.

`replica_voter` then produces the OUT_CH channels using a run-time channel
map. Each entry of the map has:

* `src0`: the slot of the channel;
* `src1`, `src2`: the slots of its two replicas;
* `tmr`: whether the channel is triplicated.

An untriplicated channel is read from `src0`. A triplicated one gets the
bitwise two-out-of-three majority of the three slots. After reset the map
is the identity without triplication.

In the default configuration (PE = 32, NF = 3) there are 96 slots. 64 of
them hold the channels, which leaves 32 slots (one fold) for replicas: up
to 16 triplicated channels. Give each replica a different PE from the
other two copies, otherwise one PE fault can defeat the vote. The
testbench places replica 1 of the j-th critical channel in slot 64+j and
replica 2 in slot 80+j, and picks critical channels that run on other PEs.

How many channels must be triplicated comes from a fault-injection
campaign. In the published campaign, layer 0 of a binarized CNV network
needed 2 channels for a worst-case drop below 2%, 7 for 1%, and 17 for
0.5%. 2 and 7 fit the default; 17 needs NF = 4.

## Applying a fault-aware schedule

Pairs of channels that are harmless alone can be very damaging together
when they share a faulty PE. A better pairing is found offline by solving
an integer linear program that maximises the worst-case accuracy over all
single-PE faults. That optimisation is software and is not part of this
RTL. To apply its result, the host:

1. writes each channel's weights and thresholds into the slot chosen for
   it, and
2. writes the channel map so that output channel c is read from that slot.

Nothing in the datapath changes.

## Top level (`qnn_layer_top`)

`qnn_layer_top` connects `injection_ctrl`, `mvtu`, `fold_collector` and
`replica_voter`. All of its ports are plain signals:

| group | signals | use |
|---|---|---|
| weights | `host_w_we, host_w_slot, host_w_sf, host_w_data` | load one SIMD word of a slot |
| thresholds | `host_th_we, host_th_ready, host_th_slot, host_th_idx, host_th_data` | load or restore one threshold; the write happens in a cycle with `host_th_we && host_th_ready` |
| injection | `inj_valid, inj_ready, inj_mode, inj_target, inj_value` | stuck-at command |
| channel map | `map_we, map_ch, map_src0..2, map_tmr` | placement and triplication |
| input | `in_valid, in_ready, in_data` | SIMD input values per word, SF words per pixel |
| output | `out_valid, out_ready, out_act` | OUT_CH activations per pixel, channel o at `[o*ABITS +: ABITS]` |

Reset is synchronous and active low. It clears the control state and the
channel map but not the weight and threshold stores, which must be loaded
before use.

Parameters and their defaults:

| parameter | default | meaning |
|---|---|---|
| `PE` | 32 | processing elements |
| `NF` | 3 | neuron folds (slots = PE·NF) |
| `OUT_CH` | 64 | output channels of the layer |
| `SIMD` | 27 | input values per cycle (whole dot product per cycle) |
| `MATRIX_W` | 27 | inputs per output (3×3 kernel × 3 colour channels) |
| `WBITS` | 1 | weight bits |
| `IN_BITS` | 8 | input activation bits (8-bit image pixels) |
| `ABITS` | 1 | output activation bits |

The accumulator and threshold widths are computed from these parameters
in `qnn_pkg`.

## Where this RTL departs from, or adds to, the published design

* Only one layer is built. The sliding-window generators, pooling units
  and the other layers of the complete CNV and LFC networks are not part
  of it. Neither are the host processor and data movers that run the
  campaign.
* NF defaults to 3 rather than the folding factor of 2 used in the
  scheduling study, so that replicas have room. Set `NF = 2` for the
  plain f = 2 layer.
* In the published approach a reordered schedule is absorbed into the
  next layer's weights and costs no hardware. Here the same reordering can
  also be undone by the voter's channel map, which exists anyway for the
  vote.
* The following are this design's own choices, as the source describes
  none of them:
  * the fold collector;
  * the valid/ready handshakes and the stall rule;
  * one shared threshold write port, owned by the injector while it is
    busy;
  * restoring faults by host rewrite;
  * the bitwise majority;
  * synchronous reset;
  * MATRIX_W = 27, 8-bit inputs, and the threshold width;
  * SIMD = 27. The source gives no SIMD width, but it states that an
    output pixel takes f clock cycles, which needs the whole dot product
    in one cycle.
* Each file's opening comment says which parts follow the published
  design and which are its own choices.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the
block with a reference model written independently in the testbench, and
ends by printing `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_qnn_pkg` | encodings, widths, stuck-at threshold counts, majority |
| `tb_simd_dot` | dot products for 1×8-bit, 1×1-bit (XNOR) and 2×2-bit lanes |
| `tb_thresholding` | binary and ternary counts, equality edges, forcing by ±TH_MAX |
| `tb_mvtu_pe` | accumulation over a fold with idle cycles, output hold |
| `tb_weight_mem`, `tb_threshold_mem` | slot addressing of writes and reads |
| `tb_mvtu` | ternary unit with random gaps and back-pressure; fold order; latency of SF cycles and one fold per SF cycles |
| `tb_injection_ctrl` | number, slots and values of the writes for slot and PE commands |
| `tb_fold_collector` | fold placement, ordering, blocking when full |
| `tb_replica_voter` | identity map, random map, one corrupted replica outvoted |
| `tb_qnn_layer_top` | whole layer at the default size, end to end |
| `tb_qnn_layer_w2a2` | the same sequence on a W2A2 hidden layer (576 inputs, SIMD 32, ternary) |
| `tb_folding_sweep` (with `tb_layer_fold_env`) | the binarized first layer built with 64, 32, 16, 8, 4 and 2 PEs (folding factor 1 to 32): one PE stuck at 0 corrupts exactly its f channels, and one vector takes f cycles |

The end-to-end tests walk through these phases:

1. default schedule;
2. a stuck channel, then its restore;
3. a stuck PE while a host write is held off;
4. 16 triplicated channels with a faulty PE whose wrong replica is outvoted;
5. a random channel permutation with a faulty PE.

Along the way they check the latency (NF·SF + 2) and the rate (one vector
per NF·SF cycles). They also count each mechanism (folding, input gaps,
output stalls, slot injection, PE injection, held host writes, votes that
mask a fault, rescheduling) and fail if one never occurred.

Run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/qnn_pkg.sv tb/tb_qnn_layer_top.sv --top-module tb_qnn_layer_top
./obj_dir/Vtb_qnn_layer_top
```

The full-size top-level test simulates in well under a second.
