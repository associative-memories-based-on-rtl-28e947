# A multiple-valued sparse clustered network associative memory in SystemVerilog

An associative memory stores data patterns ("messages") and gives one back
when it is shown only part of it. A *sparse clustered network* (SCN) does this
with a graph. It has `c` clusters of `l` nodes. A `K`-bit message is cut into
`c` sub-messages of `kappa = log2(l)` bits. Each sub-message selects one node
of its cluster, and storing the message connects its `c` nodes to each other.
That set of connections is the message's *clique*. To retrieve a message
whose bits are partly erased, the memory first activates every node the known
bits allow. It then keeps, iteratively, only the nodes that are well connected
to the active nodes in the other clusters.

In a classic SCN every connection is one bit. Two cliques often share a
connection, so deleting one message also deletes links that other messages
still need, and those messages can no longer be retrieved. This design
follows the multiple-valued SCN (MV-SCN) of Jarollahi, Onizawa, Hanyu and
Gross, "Associative Memories Based on Multiple-Valued Sparse Clustered
Networks". Each connection holds a small saturating counter. A store adds 1,
a delete subtracts 1, and a link is lost only once every message using it has
gone. Decoding does not use the raw counts. It *normalises* each count to
present/absent (`w >= 1`) and then applies one of two binary decoding rules:

* **Architecture II**: a score per node, then winner-take-all in each
  cluster. This is the source's low-error option.
* **Architecture III**: an AND over clusters of an OR over nodes. This is the
  source's low-complexity option, and it only handles erased bits, not wrong
  bits.

Both rules are built. Each retrieval request picks one.

The default size is the source's sample network: `c = 8` clusters of
`l = 16` nodes (`n = 128`), 32-bit messages and `w_MAX = 3` (2-bit weights).

## Network organisation

| quantity | value | origin |
|---|---|---|
| clusters `C` | 8 | source |
| bits per sub-message `KAPPA` | 4 | source (`l = 16 = 2^4`) |
| nodes per cluster `L` | 16 | source |
| message width | 32 bits | `C * KAPPA` |
| connections | 28 cluster pairs x 16 x 16 = 7168 | no links inside a cluster |
| weight width | 2 bits (0..3) | source: `w_MAX = 3` |
| weight storage | 14336 flip-flops | this design: all weights readable at once |
| threshold `SIGMA` | 8 (`= C`) | source |
| memory effect `GAMMA` | 1 | source |

Sub-message `i` is bits `[4i+3:4i]` of the message (`cmd_msg[i]`). Its value
is the node index in cluster `i`. Connections are stored once per unordered
cluster pair `a < b`. Pair `p` enumerates those pairs row by row
(`(0,1), (0,2), ..., (0,7), (1,2), ...`; see `scn_pkg::pair_idx`), and element
`[ja][jb]` of pair `p` links node `ja` of cluster `a` to node `jb` of cluster
`b`. The network is undirected, so one weight serves both directions.

## Learning: store, delete, update

`weight_memory` has one saturating up/down counter per connection. Each
sub-message index is decoded to one-hot, and a counter is enabled when both
of its nodes are selected. A store or delete therefore updates all 28
connections of the clique in a single clock cycle. Counts stop at 3 on a store
and at 0 on a delete. The source states the bounds as a condition
`0 <= w <= w_MAX` on its update rule; treating them as saturation is this
design's reading of that condition. An update of a stored message is a delete
of the old value followed by a store of the new one.

Saturation is what limits the scheme. A connection shared by more than
`w_MAX` cliques stops counting, and deleting enough of them can still remove
it while some message needs it. `upd_clamped` reports, in the cycle after a
store or delete, that at least one connection of that clique was already at
its bound. A store at a count of 3 saturates. A delete at a count of 0 usually
means the message was not stored, or its link was already lost.

## Retrieval: local then global decoding

1. **Local decoding** (`local_decoder`, one per cluster). `cmd_erase` marks
   erased bits. Node `j` of cluster `i` is activated when `j` agrees with
   `cmd_msg[i]` on every bit that is not erased. A fully erased sub-message
   activates all 16 nodes. A cluster with one erased bit activates 2 nodes.
2. **Normalisation** (`weight_normalizer`). `psi = (w != 0)` for every
   connection. This is what separates the source's recommended architectures
   from its rejected "Architecture I", which fed the raw counts into the score
   adders. There, a link shared by three messages outweighed three distinct
   links, and wrong nodes won.
3. **Global decoding** (`global_decoder`). One iteration per clock over the
   whole network, with one of two rules:
   * Architecture II (`score_unit` + `wta`). For each node, `s = v + (number
     of other clusters that contain an active node linked to it)`. In each
     cluster, the nodes with the highest score stay active, provided that
     score is at least `SIGMA`.
   * Architecture III (`and_or_unit`). A node stays active only if it is
     active and every other cluster contains an active node linked to it.

   Decoding stops after the first iteration that changes nothing
   (`rsp_converged = 1`) or after `cmd_max_iter` iterations (0 counts as 1).
   The source evaluates 1 and 4 iterations.
4. **Read-out** (`node_encoder`). For each cluster it gives the index of the
   active node (the lowest one, if several are active), plus a flag for an
   *ambiguous* cluster (several active nodes) and an *empty* one (none). A
   retrieval succeeded when no flag is set and `rsp_msg` equals the stored
   message.

### The score rule, and why II and III agree here

The source prints the Architecture II score as a double sum over every node
of every other cluster: `s(i,j) = sum_i' sum_j' psi v + gamma v`. Read
literally, an erased cluster with 16 active nodes adds up to 16 to every
score. With the source's settings (density 0.4, half the clusters erased),
that literal form failed on every message in simulation. The source's own
worked example points to a different form. It says a node "must receive 3
connections from other clusters to achieve a maximum score of 4". So each
other cluster adds at most one, and the score is
`sum_i' OR_j'(psi v) + gamma v`. `score_unit` implements that form. With it, the simulated error
rates come close to the published ones (next section).

One consequence follows. With `GAMMA = 1` and `SIGMA = C`, the top score
`C-1+1 = C` can only be reached by an active node that is linked to every
other cluster. That is exactly the Architecture III condition, so at the
default parameters the two rules produce the same activations in every
iteration. They still differ in cost: II needs a 4-bit adder per node and a
16-way maximum per cluster. The source reports that II beats III at deletion
rates above about 0.3. This design does not reproduce that difference. It
would need a threshold or score form the source does not give. `SIGMA` is a
parameter: below `C`, Architecture II also accepts best-but-incomplete nodes
and can correct wrong bits, as the source claims II can.

## Interface and timing (`mv_scn`)

| signal | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (clears all weights) |
| `cmd_valid` / `cmd_ready` | in / out | 1 | request handshake; accepted on a clock edge where both are 1 |
| `cmd_op` | in | `op_e` | `OP_STORE`, `OP_DELETE`, `OP_RETRIEVE` |
| `cmd_msg` | in | 8 x 4 | message |
| `cmd_erase` | in | 8 x 4 | erased-bit mask (retrieve only) |
| `cmd_mode` | in | `mode_e` | `MODE_ARCH2` or `MODE_ARCH3` (retrieve only) |
| `cmd_max_iter` | in | 4 | iteration limit (retrieve only) |
| `upd_clamped` | out | 1 | the store/delete of the previous cycle hit a bound |
| `rsp_valid` | out | 1 | one-cycle pulse: retrieval result below is valid |
| `rsp_msg` | out | 8 x 4 | retrieved message |
| `rsp_nodes` | out | 8 x 16 | final node activations |
| `rsp_ambiguous`, `rsp_empty` | out | 8 | per-cluster flags |
| `rsp_iters` | out | 4 | iterations performed |
| `rsp_converged` | out | 1 | the last iteration changed nothing |

* A store or delete is accepted in one cycle and takes effect at that edge.
  Requests can follow every cycle.
* A retrieval accepted at edge `T` runs its `k` iterations at edges
  `T+1 .. T+k`. `rsp_valid` is high in the cycle after edge `T+k`.
  `cmd_ready` is low from `T` until then, so a request presented meanwhile
  stalls. It is accepted at the end of the `rsp_valid` cycle. Back-to-back
  retrievals of `k` iterations each therefore start every `k+1` cycles.
* The result outputs hold their values after `rsp_valid` until the next
  retrieval is accepted.

Two assertions guard the rules: learning never happens while the decoder
iterates, and the decoder never runs past its iteration limit.

The critical path is combinational and spans one iteration: the
normalisation ORs, a 16-input OR per (node, other cluster), a 4-bit 8-input
adder per node, then the 16-way maximum and compare per cluster. The weight
read is free, because weights are flip-flops. A store's one-hot enables fan
out to all 7168 counters.

## Results of the end-to-end test

`tb_mv_scn` runs the source's main experiment at the default size. It stores
131 random messages, giving density `1 - (1 - 1/256)^131 = 0.40`. It
retrieves each with 4 of its 8 sub-messages erased, then repeats after
deleting half of the messages and after updating 16 of the rest. One run gave:

| phase | rule, iterations | MER (this RTL) | source's figure (approx., read from plots) |
|---|---|---|---|
| no deletion | II, 1 | 0.81 | 0.8 |
| no deletion | II, 4 | 0.30 | 0.28 |
| no deletion | III, 4 | 0.27 | 0.28 |
| deletion rate 0.5 | II, 1 | 0.26 | 0.24 |
| deletion rate 0.5 | II, 4 | 0.09 | 0.02 |

MER is the fraction of retrievals that did not return the unique, correct
message. The samples are small (131 and 66 messages), so these figures are
only indicative.

### Sweeps

`tb_mer_sweep` repeats the source's sweeps with up to 100 retrievals per
point. Density sweep, Architecture II, no deletion:

| density | messages | MER, it=1 | MER, it=4 |
|---|---|---|---|
| 0.1 | 27 | 0.07 | 0.00 |
| 0.2 | 58 | 0.21 | 0.03 |
| 0.3 | 92 | 0.50 | 0.10 |
| 0.4 | 131 | 0.90 | 0.32 |
| 0.5 | 178 | 0.96 | 0.65 |
| 0.6 | 235 | 1.00 | 0.95 |

Deletion-rate sweep at density 0.4, Architecture II, 4 iterations:

| deletion rate | 0 | 0.1 | 0.2 | 0.3 | 0.5 | 0.7 | 0.9 |
|---|---|---|---|---|---|---|---|
| `w_MAX = 3` | 0.23 | 0.17 | 0.17 | 0.06 | 0.11 | 0.18 | 0.08 |
| `w_MAX = 1` (binary) | 0.26 | 0.72 | 0.93 | 1.00 | 0.99 | 1.00 | 1.00 |

The trends match the source: multiple-valued weights hold the error rate
down as messages are deleted, and binary weights do not. The binary network
here degrades more than the source reports (about 0.5 at deletion 0.3 there).
At `SIGMA = C`, one lost link empties its cluster, and the decoder has none of
the error-correcting behaviour the source attributes to Architecture II.

## Files

| file | contents |
|---|---|
| `rtl/scn_pkg.sv` | default sizes, `op_e`, `mode_e`, `pair_idx`, width helpers |
| `rtl/local_decoder.sv` | sub-message + erasures to cluster activations |
| `rtl/weight_memory.sv` | 7168 saturating 2-bit counters, store/delete |
| `rtl/weight_normalizer.sv` | `psi = w != 0` |
| `rtl/score_unit.sv` | Architecture II scores |
| `rtl/wta.sv` | per-cluster winner-take-all with threshold |
| `rtl/and_or_unit.sv` | Architecture III iteration |
| `rtl/global_decoder.sv` | activation register, iteration control, rule select |
| `rtl/node_encoder.sv` | activations to message + flags |
| `rtl/mv_scn.sv` | top level |
| `tb/scn_ref_pkg.sv` | reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_mer_sweep` |

## Verification

Every module has its own testbench. Each one compares against the reference
model in `tb/scn_ref_pkg.sv`, which stores connections as a full symmetric
bit matrix and codes each rule straight from its equation. Each testbench
prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_local_decoder` is exhaustive: all 16 values with all 16 erasure masks.
* `tb_weight_memory` tracks an integer model through 400 random stores and
  deletes, drawn from a small alphabet so that both bounds are hit. After
  every operation it compares all 7168 weights and the clamp flag.
* `tb_score_unit`, `tb_wta`, `tb_and_or_unit` and `tb_weight_normalizer`
  compare every output bit on random networks.
* `tb_global_decoder` checks final activations, iteration count, convergence
  and latency over 240 decodes, with both rules and limits 0..5.
  Back-to-back starts are included.
* `tb_mv_scn` is the full-size test described above. It checks every result
  against the model, including latency and the stall. It also counts that
  each mechanism happened: store, delete, both clamps, both rules, early
  convergence, stopping at the limit, ambiguous and empty clusters, stalls.
  It runs in about a second.
* `tb_mer_sweep` runs the source's density and deletion-rate sweeps on a
  `w_MAX = 3` and a `w_MAX = 1` instance side by side. It checks the
  qualitative results: error rate rising with density, and multiple-valued
  weights beating binary ones once messages are deleted.

To simulate with Verilator 5, list the packages first and let `-y` find the
modules:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/scn_pkg.sv tb/scn_ref_pkg.sv tb/tb_mv_scn.sv --top-module tb_mv_scn
./obj_dir/Vtb_mv_scn
```

Replace `tb_mv_scn` with any other testbench name. For lint only:
`verilator --lint-only -Wall -y rtl rtl/scn_pkg.sv rtl/mv_scn.sv`.

## Departures from the source and design choices

* **Score form.** Per-cluster OR instead of the printed double sum (see
  above). At `SIGMA = C`, Architectures II and III then coincide
  functionally.
* **Architecture I is not built.** The source rejects it in favour of II and
  III.
* **Both recommended rules are in one design**, chosen per request. A
  product would probably keep only one.
* **Architecture of the weight store.** The source refers to earlier work
  for it. Here it is flip-flops with a full parallel read and a one-cycle
  clique update.
* Choices the source leaves open: the request/response protocol, the
  iteration limit input, per-bit erasure masks, the lowest-index read-out,
  saturation at the bounds, and synchronous reset.
* The source's comparison against a binary network with 181 nodes cannot be
  expressed, because this design needs `2^kappa` nodes per cluster.

## Changing the design

`mv_scn` parameters: `C` (clusters), `KAPPA` (bits per sub-message,
`L = 2^KAPPA`), `WMAX` (weight ceiling; the width follows as
`ceil(log2(WMAX+1))`), `GAMMA`, `SIGMA` (defaults to `C`) and `ITW` (width of
the iteration limit). `WMAX = 1` gives a classic binary SCN with the same
decoders, which is how the source's binary baselines can be run. The
testbenches' reference model is written for the default `C = 8`,
`KAPPA = 4`. Storage grows as `C(C-1)/2 * L^2 * ceil(log2(WMAX+1))` bits,
and the decoders grow with `C^2 * L^2`.
