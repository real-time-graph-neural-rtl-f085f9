# GNN-ETM: a graph-neural-network cluster finder for a calorimeter trigger

This RTL is a trigger module for a crystal calorimeter with 576 trigger
cells (TCs). Its job is to find the clusters (photon candidates) in the
TCs of every 125 ns data window. The module receives a stream of TC
energies and times from the upstream trigger module. It builds a small
graph of the cells that fired and runs a two-layer GravNet graph neural
network on it. A condensation-point selection then turns the per-node
network outputs into a list of clusters. For each cluster it reports the
energy, the position and a signal score, all tied back to the TC ids.

Two hard constraints shape the design:

* A new window arrives every 125.9 ns, which is 16 cycles of the
  127.216 MHz system clock. Every stage must accept one window per 16
  cycles and never stall.
* An event holds at most N_MAX = 32 nodes. Each stage works on P_PAR = 2
  nodes per cycle, and 32 / 2 = 16 gives the 16-cycle initiation interval.

## Data path at a glance

```
TC stream (16 beats x 36 TCs)
  -> preprocessing
       address_generation   beat/lane -> TC id
       trigger_window       OR with the previous window (250 ns window)
       stream_compaction    keep the first 32 hit TCs, in TC-id order
       event_statistics     most energetic TC -> reference time
       event_calibration    x, y, z (table), E/8 GeV, (t - t_ref)/256, Q4.12
  -> gnn_accelerator (2 nodes/cycle, one event every 16 cycles)
       scaling layer (5 -> 5, Q3.5) ------------------------------+ skip FIFO
       GravNet block 1 (5 -> 32, Q3.5) ---------------------+     | skip FIFO
       GravNet block 2 (32 -> 32, Q3.5) --------------------+-----+-> concat (69)
       DL2 (69 -> 16, ReLU)
       heads: energy factor (1), position (3), CCoords (3),
              signal (1, hard sigmoid), beta (1, hard sigmoid)
       energy = factor x E feature x 8
       cps: candidates + isolation -> bitonic sort by beta -> CPCS
  -> postprocessing   node results + TC ids -> 16 beats of 2 records
readout (b2l_subsystem), for every readout trigger:
       channel_alignment -> channel_delay (x2) -> daq_buffer (x2)
       trigger_delay -> dispatcher -> daq_buffer;  rr_arbiter -> output
```

`gnn_etm_top` wires these together. Channel 0 of the readout records the
compacted TC stream, and channel 1 records the cluster output.

## Numbers

Every stage is statically scheduled. There is no back-pressure, so each
latency is a fixed number of cycles:

| stage | cycles |
|---|---|
| preprocessing: last input beat -> first node beat | 5 |
| scaling / dense layers | 2 each |
| GravNet aggregation (distances, top-k, weights, max/sum) | 5 after the last node beat |
| condensation point selection: last node beat -> result | about 34 |
| whole module: first input beat -> first cluster beat | **129 cycles = 1.01 us** |

The end-to-end test measures the 129 cycles. A published implementation
of the same design reports 3.2 us in total. That figure includes serial
links and a slower, longer pipeline. The numbers here are for this RTL
only and say nothing about the clock frequency a real FPGA would reach.

## Number formats

* Activations travel in a 16-bit container with 10 fractional bits
  (Q6.10, the `act_t` type).
  * The network inputs are Q4.12 (12 fractional bits).
  * The GravNet block outputs and the scaling layer are quantised to Q3.5.
    They are stored on the Q3.5 grid inside the Q6.10 container, so all
    consumers read one format.
  * All quantisation uses floor (an arithmetic shift) and saturates.
* Weights and biases are 16-bit Q6.10 (`wgt_t`). Accumulators are 48 bits.
* The hard sigmoid is `clip(0.1875 x + 0.5, 0, 1)`, computed as
  `(3x >> 4) + 0.5`.
* The GravNet edge weight is `exp(-10 d)`. It comes from a 256-entry,
  8-bit table over the distance range [0, 0.5); larger distances give a
  weight of 0. The table is computed at elaboration:
  entry i = round(128 exp(-10 i / 512)).
* Distances are L1 norms, both in the GravNet learned space and in the
  clustering space.
* The thresholds are t_beta = 0.04 (41 in Q6.10) and t_d = 0.3 (307).

## The GravNet layer (gravnet_block, gravnet_conv)

A block applies a dense layer DL1 (16 outputs, ReLU). Two linear layers
then map the result to a 6-dimensional learned space S and to 8 features
F. `gravnet_conv` collects all 32 nodes of the event into one of two
ping-pong banks, then processes 2 query nodes per cycle:

1. The L1 distance from the query node to all 32 nodes in S. Padded
   nodes are given the largest distance.
2. The k = 8 nearest nodes, found by a parallel rank count. Ties go to
   the lower index, and the query node itself is one of its neighbours.
3. The edge weights, from the exponential table. The messages are
   F x weight; messages from padded neighbours are 0.
4. The maximum and the saturated sum of the 8 messages per feature.

The 16 + 8 + 8 values then go through DL_out (32 outputs, ReLU, Q3.5).
While one bank is being read, the next event fills the other.

## Condensation point selection (cps, cpcs)

The network gives each node a beta (how likely it is to be a cluster
centre) and three clustering coordinates (CCoords). The selection has
three parts:

* `cps_candidate_isolation` flags the candidates: valid nodes with
  beta > t_beta. In the same cycle it forms a 32 x 32 isolation matrix,
  where `iso[q][j] = 1` means node j lies at least t_d from node q.
* `bitonic_sort` orders the 32 node indices by beta, highest first. It is
  15 compare-exchange stages and is fully pipelined. Invalid nodes get the
  smallest key.
* `cpcs` runs the greedy suppression for 16 iterations. Each iteration
  takes two indices from the sorted list. A node becomes a condensation
  point if its flag is still set, and its isolation row is then ANDed into
  the flags. The loop visits all 32 nodes. As in the published pseudo
  code, the row of every visited node is applied, including nodes that
  were not selected. A new event may start during the last iteration of
  the previous one, so the unit keeps the 16-cycle rate.

Every node keeps its own regressed parameters. The output reports all 32
nodes with a flag that marks the condensation points.

## Readout (Belle2Link side)

This part records the module's input and output around readout triggers.

* `channel_alignment` buffers each channel until all of them have
  delivered data, then releases them in lockstep.
* `channel_delay` gives each channel a programmable delay of 1..255
  cycles.
* `trigger_delay` gives the trigger a programmable delay of 1..1024
  cycles.
* `dispatcher` hands each trigger to the lowest-numbered free DAQ buffer.
  When both buffers are busy it drops the trigger and counts the drop.
* A `daq_buffer` captures the next 32 words of all channels. It then
  requests the output and sends one header word, `{event number, buffer
  id, 32}`, followed by the 32 words. The first word is marked sop and
  the last eop.
* `rr_arbiter` gives the output to one buffer at a time, in round-robin
  order, and holds the grant until that buffer's eop.

The delays are written through the configuration bus (target
`TGT_B2L`). The serial link itself is not part of the RTL. The packet
appears on the `b2l_*` ports.

## Configuration

Trained weights are not part of the RTL, and neither is the TC geometry.
Both are written through one write-only bus, `cfg_bus_t {we, tgt[6],
addr[12], data[16]}`:

* `TGT_POS_LUT`: the position table. The address is `{coordinate[1:0],
  TC id[9:0]}` and the data is Q4.12.
* `TGT_B1_*`, `TGT_B2_*`, `TGT_SCALE`, `TGT_DL2` and `TGT_O_*`: the
  layers. In a layer with IN inputs and OUT outputs, weight (o, i) is at
  address `o*IN + i` and bias o is at `OUT*IN + o`, both Q6.10.
* `TGT_B2L`: the readout delays.

Weight registers are not reset, so a user must write every weight before
use.

## Departures from the published design

* **Clocks.** The published module runs the preprocessing at twice the
  system clock. Here everything runs on one clock, with the input widened
  to 36 TCs per beat, so the 576 TCs still arrive in 16 beats.
* **Input encoding.** TC energies arrive as 16-bit MeV values and times as
  signed 8-bit values. The serial-link framing of the real board is not
  modelled.
* **Energy feature.** E/8 GeV is computed as `E_MeV x 33554 >> 16` and
  saturates at 8 GeV. The time feature is `(t - t_max) << 4`, where t_max
  is the time of the most energetic TC.
* **Memories and interfaces.** The skip-path FIFOs, the id FIFO of the
  postprocessing and the DAQ buffers are plain register arrays. The sizes
  are this design's choices: 64 entries for the skip FIFOs, 256 for the
  id FIFO, and 32 words per readout window.
* **Latency.** The published module reports 621 ns for the preprocessing,
  2052 ns for the GNN and 495 ns for the postprocessing. This pipeline is
  shorter (see Numbers) and was not tuned to match those figures.
* **Input format.** One passage of the published text calls the inputs
  Q4.10, while the quantisation table gives Q4.12. This design uses Q4.12.
* **Not built:** the optical link and Belle2Link physical layers, the
  board's base firmware (clocking, slow control, link receivers), and the
  older cluster-finding module that the GNN replaces. Their signals are
  ports of the top.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_gnn_etm_top` drives the full-size module with 40 windows back to
  back.
  * The weights are chosen so that every output is predictable: an
    identity scaling layer, a DL2 that passes ±x, ±y and ±z, heads that
    rebuild the position and CCoords, and an energy factor of 1.0. The
    GravNet blocks get random weights, so they run, but DL2 ignores them.
  * A reference model of the trigger window and the compaction predicts
    every node. Per node, the test checks the TC id, energy and time, the
    cluster energy, the position and the signal score.
  * It checks the condensation points for isolation: any two are at
    least t_d apart, and every non-empty window has at least one.
  * It checks the 16-beat bursts, 16 cycles apart, and the readout packet
    format.
  * It also counts the overflow, trigger-window merge, suppression,
    packet, dropped-trigger and arbiter-wait events, and fails if any of
    them never happened.
* Block testbenches:
  * `tb_bitonic_sort` checks order, permutation and the latency of
    15 stages.
  * `tb_topk_select` compares against a stable selection.
  * `tb_exp_lut` compares against a real-valued exp.
  * `tb_channel_delay` and `tb_trigger_delay` run several delay settings.
  * `tb_gravnet_conv` compares the GravNet aggregation, for six events fed
    back to back, against a reference model of distances, top-k, weights,
    maximum and sum.
  * `tb_gravnet_block` runs a whole block with selection weights (each
    dense layer passes some of its inputs through), so that the same
    reference model plus the Q3.5 output quantisation predicts every
    output. It also checks the 12-cycle latency from the last input beat.
* The other blocks are checked through `tb_gnn_etm_top`.

To run a test with plain verilator:

```
verilator --binary --assert --timing --top-module tb_gnn_etm_top \
  -y rtl -y tb +libext+.sv rtl/gnn_pkg.sv tb/tb_gnn_etm_top.sv
obj_dir/Vtb_gnn_etm_top
```

## Files

`rtl/gnn_pkg.sv` holds the sizes, the types and the configuration
targets. Every other file in `rtl/` holds one module of the same name.
`tb/` holds the testbenches.
