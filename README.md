# Neural z-vertex track trigger: preprocessing and a time-multiplexed 27-81-2 network

At a collider experiment, most particle tracks seen by the central drift chamber do not
come from the collision point but from beam background far away from it along the beam
axis (z). A first-level trigger that estimates, for each track, where along z it
started can reject those tracks before the detector is read out. This design does that
estimate with a small neural network, a multilayer perceptron with 27 inputs, 81 hidden
neurons and 2 output neurons, all using tanh, evaluated in hardware within a few
hundred nanoseconds.

The RTL here reconstructs the FPGA datapath described in "Low Latency Neural Networks
using Heterogenous Resources on FPGA for the Belle II Trigger" (S. Baehr et al.).
It is an independent implementation, not the authors' code. The paper's own contribution is the way the network is scheduled onto a limited number of
multiply-accumulate (MAC) units, and that part is reproduced cycle for cycle. The
preprocessing blocks around the network are described in the paper by name and purpose
only. Their internals here are simple, reasonable choices, and they are marked as such
below.

## What arrives and what leaves

Per collision event the trigger receives three things, already decoded from their
serial links:

* an **event time** from the event time finder;
* **2D tracks** from the 2D track finder: azimuth `phi0` at the origin and a signed
  curvature `omega`;
* **track segments** (TS) from the segment finders of the nine super layers SL0..SL8:
  one segment id and priority time per layer and clock. SL1, SL3, SL5 and SL7 are
  stereo layers, whose wires are tilted and so carry z information. The others are
  axial.

For every 2D track the trigger outputs two network values in [-1,1]. `out_y[0]` is the
z-vertex estimate. The paper does not say what the second output neuron means.

## Per-track datapath (`nnt_top`)

```
 ts_in ──► hit_selection ──┬──────────────► (cand delayed) ───────────┐
                           ├──► mlp_selection ──► (delay 2) ──────────┼──► dispatch ─► mlp_core #0 ─┐
 track ──► alpha_refid_calc ──► delta_id_calc ──► scaling ────────────┘             ─► mlp_core #1 ─┴─► out
 event_time ──► register ─────────────────────────┘
```

| cycle | stage | what happens |
|---|---|---|
| T | input | track valid; the segments held by `hit_selection` at this moment are its candidates |
| T+1 | `alpha_refid_calc`, `mlp_selection` | crossing angle and reference segment id per layer; network chosen from the stereo hit pattern |
| T+2 | `delta_id_calc` | nearest candidate per layer and its signed id distance `phi_rel` |
| T+3 | `scaling` | 27 inputs in Q1.12; dispatch to a free network core |
| T+20 | `mlp_core` | result (`out_valid`, `out_tag` = running track number) |

Branches that do not depend on each other run side by side. Fixed delay registers bring
a track's inputs and its network choice together in cycle T+3. An assertion checks that
they arrive together.

**Network inputs.** For super layer `sl` the inputs are `x[3sl]` = crossing angle
alpha between track and radial direction, `x[3sl+1]` = relative position `phi_rel` of
the matched segment, and `x[3sl+2]` = drift time (segment time minus event time). A
layer with no segment contributes three zeros.

**Network choice.** Five weight sets are kept. Set 0 is for tracks with segments in
all four stereo layers. Set k+1 is for tracks whose only missing stereo layer is
SL(2k+1). Tracks missing two or more stereo layers get no network and are counted in
`n_no_net`.

**Two cores.** Each core accepts one track every 9 cycles. The dispatcher tries the
core after the one used last, then the other. If both are busy the track is dropped and
counted in `n_dropped`. A trigger cannot stall its input, so tracks are dropped rather
than queued.

## The time-multiplexed network (`mlp_core`, `macro_neuron`, `mac_unit`)

A fully parallel 27-81-2 network would need 81×27 + 2×81 = 2349 multipliers. The
schedule used here ("macro neuron, version 2") needs 261 MAC units per network:

* **27 hidden macro neurons of 9 MACs each.** Macro neuron `g` computes hidden neurons
  `g`, `27+g` and `54+g`, one after the other (slots s = 0, 1, 2). Each neuron takes 3
  cycles. In cycle `j` of a slot, MAC `m` multiplies input `9j+m` by its weight and
  adds the product to its own accumulator. After 3 cycles the 9 accumulators hold
  partial sums that together cover all 27 inputs.
* **2 output neurons of 9 MACs each.** An output neuron has 81 inputs. It takes them in
  three groups of 27, one group per hidden slot, as soon as that slot's activations
  exist. Each group takes 3 cycles. The adder tree adds each group's partial sums into
  a running sum.

Every box below is one clock (t = cycles after the core accepted the vector, plus one):

| t | 0‒2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 | 16 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| hidden MAC | slot 0 | slot 1 | slot 1 | slot 1 | slot 2 | slot 2 | slot 2 | | | | | | | | |
| hidden Σ (+bias) | | s0 | | | s1 | | | s2 | | | | | | | |
| hidden tanh | | | s0 | | | s1 | | | s2 | | | | | | |
| output MAC | | | | s0 | s0 | s0 | s1 | s1 | s1 | s2 | s2 | s2 | | | |
| output Σ | | | | | | | s0 (+bias) | | | s1 | | | s2 | | |
| output tanh | | | | | | | | | | | | | | ✓ | |
| `out_valid` | | | | | | | | | | | | | | | ✓ |

Things to notice:

* **Just-in-time reads.** The hidden activations of slot `s` are registered at the end
  of t = 3s+4. They are read by the output MACs in t = 3s+5..3s+7. They are overwritten
  at the end of t = 3s+7, exactly when no longer needed. So one register per macro
  neuron is enough.
* **Adder tree and activation overlap with MACs.** The tree and the activation of one
  neuron run while the MACs already work on the next neuron. The MAC accumulator is
  read by the tree in the cycle in which it is reloaded with the first product of the
  next neuron.
* **Throughput.** The hidden macro neurons are busy for 9 cycles per vector, so a core
  accepts a vector every 9 cycles (`in_ready`). The output phase of one vector overlaps
  the hidden phase of the next. The latency from acceptance to `out_valid` is 17
  cycles, which is 134 ns at the 127 MHz clock the paper uses. An assertion in
  `mlp_core` checks it.
* **Control.** A 4-bit phase counter marks the hidden phase. The signals that control
  the later stages are the same {slot, cycle, network, tag} word delayed by 1, 2, 5, 6,
  7 and 8 cycles. So each stage of a vector uses that vector's own network index even
  when two vectors are in flight.

**Heterogeneous MACs.** The paper balances resources by building part of the MACs
from fabric logic (LUTs) instead of DSP slices, 40 % in its chosen configuration.
`mac_unit #(USE_LUT)` has two bodies that compute the same value: an inferred
multiplier tagged for DSP use, or an explicit shift-and-add of partial products.
`mlp_core #(LUT_PCT)` spreads the LUT MACs evenly: MAC number `i` (0..260, hidden
MACs first) is a LUT MAC when ⌊(i+1)·LUT_PCT/100⌋ > ⌊i·LUT_PCT/100⌋. At 40 % that
makes 104 of 261 MACs. Whether a synthesis tool keeps that split is up to the tool.
Both variants take run-time weights, because the network is switched per track.

## Number formats and the activation table

| quantity | format |
|---|---|
| network inputs, hidden and output values | signed Q1.12, 13 bits, limited to ±4095/4096 |
| weights and biases | signed Q3.12, 16 bits (fits the 18-bit DSP multiplier port) |
| MAC accumulators and sums | signed, 36 bits, 24 fractional bits |
| azimuth | unsigned 12 bits, 4096 steps per turn |
| curvature `omega` | signed 10 bits |
| segment id / time | 9 bits / 9 bits (clock ticks, modulo 512) |

`tanh_activation` shifts the sum down to 8 fractional bits and saturates it to
[-4, 4). It then looks up `TANH_TABLE[a + 1024]`, where table entry `k` is
round(4096·tanh((k−1024)/256)) limited to ±4095. The 2048-entry table is computed at
elaboration with `$tanh` in `nnt_pkg`. No data file is needed.

## Weight loading (`weight_memory`)

Each core stores 5 × (81 × 28 + 2 × 82) = 12 160 weights and biases in registers. They
are not reset, so they must be loaded before the first track. The top broadcasts
`wr_en`/`wr_cmd` to all cores, one value per cycle:

| field | meaning |
|---|---|
| `layer` | 0 = hidden, 1 = output |
| `net` | network 0..4 |
| `neuron` | hidden 0..80 or output 0..1 |
| `index` | hidden: input 0..26, 27 = bias; output: hidden neuron 0..80, 81 = bias |
| `value` | Q3.12 |

The read ports hand every MAC the weight it needs in the current cycle:
`W_hid[net][27s+g][9j+m]` for the hidden layer and `W_out[net][k][27s+9j+m]` for the
output layer.

## Preprocessing blocks: what is this design's own

The paper names these blocks and draws their connections, but gives no internals. The
versions here are minimal:

* `hit_selection` keeps the last `TS_DEPTH`=4 segments of each layer for
  `TS_HOLD`=64 cycles (about 0.5 µs). It takes no input from the track, matching the
  data flow drawn in the paper.
* `alpha_refid_calc` uses a small-angle circle model. alpha = r·omega/256 in azimuth
  units, saturated at ±π/2. The crossing azimuth is phi0 − alpha. The reference id is
  ⌊phi_cross · NTS / 4096⌋.
* The segment counts per layer NTS = 160, 160, 192, 224, 256, 288, 320, 352, 384 are
  those of the Belle II drift chamber. The layer radii 198 + 113·sl mm are placeholders
  spread evenly over the chamber. Both sit in `nnt_pkg` and should be replaced with the
  real geometry.
* `delta_id_calc` picks the candidate nearest the reference id, wrapping modulo NTS,
  with the lowest index winning ties. `phi_rel` is that distance in segment units.
* `scaling` multiplies by fixed powers of two (alpha ×4, phi_rel ×512, drift ×16) and
  saturates. In a real system these factors would come from the training
  normalisation.
* `mlp_selection` numbers the networks as above and rejects tracks missing two or more
  stereo layers.

Other choices not taken from the paper:

* a synchronous, active-low reset of the control state only;
* the round-robin dispatch with dropping;
* an 8-bit running track tag.

## Where it departs from, or cannot match, the paper

* **Throughput.** The paper quotes 31.75 MHz. Two cores at 127 MHz with a 9-cycle
  interval sustain 28.2 M tracks/s. If a track could arrive every 31.75 MHz tick,
  about 11 % would be dropped. The paper asks for two networks in parallel, and that
  is what is built. `N_CORES = 3` would give 42.3 M tracks/s.
* **LUT MACs.** The paper argues for LUT MACs mainly when weights are constant. Here
  every MAC takes run-time weights, because of the five switchable networks.
* **Input order.** The paper's figure of the inputs draws them as alpha, drift time,
  phi_rel. Its text lists alpha, phi_rel, drift time, and the text order is used.
* **Not included.** The transceivers, the link protocol modules (their frame formats
  are not given) and any checking of the paper's FPGA utilisation numbers.
* **Not built.** The other schedules the paper compares against (fully parallel,
  interleaved layers with 297 MAC units) are not built; only the chosen one is.

## Files

`rtl/`:

* `nnt_pkg.sv`: sizes, types, geometry, activation table.
* `mac_unit.sv`, `tanh_activation.sv`, `macro_neuron.sv`, `weight_memory.sv`,
  `mlp_core.sv`: the network.
* `hit_selection.sv`, `alpha_refid_calc.sv`, `delta_id_calc.sv`, `scaling.sv`,
  `mlp_selection.sv`: preprocessing.
* `nnt_top.sv`: the top.

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each compares the
block against its own integer model, with tanh taken from `$tanh`, and prints
`TB_RESULT checks=N failures=M`.

`tb_nnt_top` runs the whole trigger at its default sizes: 60 events, about 160 tracks.
It checks every result, its 20-cycle latency, and the totals of results, dropped tracks
and tracks without a network. It also requires that each of the following happened at
least once:

* each of the five networks was used;
* each core was used;
* a track was dropped;
* a track had no network;
* a layer was empty;
* a segment expired between events.

To simulate one, for example the top:

```
verilator --binary --timing --assert -j 4 -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_nnt_top rtl/nnt_pkg.sv tb/tb_nnt_top.sv
./obj_dir/Vtb_nnt_top
```

Every testbench runs in seconds. `tb_hit_selection` overrides `HOLD` to 12 to reach
expiry often, and no other testbench changes a size.

**Synthesis note.** Because the weights are held in registers with 45-way read
multiplexers per MAC, generic synthesis of `mlp_core` and `nnt_top` is slow. On an
FPGA the per-MAC weight columns would map naturally onto small distributed RAMs.
