# MRFI stream arbitration NoC in SystemVerilog

A multiband RF interconnect (MRFI) can transmit and receive on many frequency
bands at the same time, in every node. This changes how a network-on-chip
built on one shared RF line can be arbitrated:

* **Requests travel in frequency, not in time.** Every node owns one
  *arbitration band* and puts a short *sub-stream vector* on it each cycle.
  Every node hears all arbitration bands at once. So in the same cycle, every
  node holds the complete request picture (the *full stream*).
* **Bandwidth is dealt out dynamically.** Every node runs the same
  deterministic algorithm on the same full stream. So, with no further
  messages, all nodes agree which source/destination pairs won. They also
  agree which of the M *data bands* each pair uses next cycle. One winning
  pair alone gets all M bands. Several pairs share the bands round-robin.
  No band stays idle while any pair is admitted.

The RTL here is the digital part of such a network: the per-node arbitration
logic, the priority table, the node's queues and band control, and a top level
joining K nodes. The RF front ends (carrier generators, DACs, mixers,
filters, ADCs) are analog. They are replaced by a digital model of the shared
line (`mrfi_channel`).

## One cycle, seen from a node

Everything is synchronous to one clock. A band carries one flit (data
bands) or one sub-stream vector (arbitration bands) per cycle. Propagation
along the line is taken to fit well within a cycle.

In cycle *t* every node, in parallel:

1. **Announces.** It puts `{fc, interested, destination}` on its arbitration
   band. The band index is the node's current priority.
   * `fc` (flow control) is `0` when its receive buffer can take a whole
     cycle of M flits.
   * `interested` is `1` when flits are still queued *after* the flits it
     sends in this cycle.
   * `destination` is the node ID of the oldest such flit.
2. **Arbitrates.** It reads all K arbitration bands, runs the algorithm below,
   and registers two M-bit masks: `TX_CH` (bands to send on) and `RX_CH`
   (bands to listen to), together with the source it will hear from.
3. **Moves data** using the masks registered in cycle *t−1*:
   * It sends up to `popcount(TX_CH)` queued flits for the granted
     destination, one per granted band, in ascending band order.
   * It stores the flits that arrive on the `RX_CH` bands, in band order,
     tagged with the source.

A request announced in cycle *t* therefore moves its data in cycle *t+1*,
while the next arbitration already runs in *t+1*. One trip, one cycle. A node
that sends its last flits in cycle *t+1* already announces "not interested"
in that cycle. That is why a node finishing a transfer never wastes an
arbitration slot.

Timing at the top level:

| event | cycle |
|---|---|
| flits queued at a node's host port (`in_cnt`) | *t* |
| announced in the sub-stream vector | *t+1* |
| admitted (if it wins) | *a* ≥ *t+1* |
| on the data bands | *a+1* |
| readable at the destination's host port (`out_cnt`) | *a+2* |

## The sub-stream vector

`2 + log2(K)` bits. Most significant first:

| bit | meaning |
|---|---|
| `[SV_W-1]` | flow control: 0 = can receive |
| `[SV_W-2]` | interested: 1 = wants to send |
| `[log2K-1:0]` | destination node ID (IDs start at 0) |

With 16 nodes the vector is 6 bits. Example with four nodes: `0101` means
"can receive, wants to send to node 1". `0100` means "wants to send to node 0".

## The arbitration algorithm (`mrfi_stream_arbiter`)

The full stream is walked in priority order, from band 0 (highest) to band
K−1. A working copy of the flow-control bits, indexed by node ID, starts as
the announced `fc` bits. For the node at priority *i*:

```
if interested and busy[dest] == 0 and q < M:
    busy[dest] = 1          -- later sources for the same destination lose
    if i == my priority:    p_t = q, tx_grant = 1
    if dest == my node ID:  p_r = q, rx_grant = 1, rx_src = node at priority i
    q = q + 1
```

After the walk, a granted node sends on data bands `p_t+1, p_t+1+q,
p_t+1+2q, …` (1-based) up to M. The receiving node listens on
`p_r+1, p_r+1+q, …`.

Consequences:

* A destination receives from at most one source per cycle. That source is
  the highest-priority one aiming at it.
* At most M pairs are admitted in a cycle.
* The q admitted pairs interleave over the bands. Together they cover all M
  bands, so granted bandwidth is 100 % whenever anything is granted.

Example: six bands, three admitted pairs. The pair with one pair ahead of it
(p = 1) gets bands 2 and 5.

Counting starts at `p+1`, i.e. the first band of a pair is `p+1` itself. This
matches the prose description of the scheme and its worked example. A loop
that starts at `p + q` would make the example impossible, and is not used.

The module is combinational: a priority-ordered scan with q as a running
count, then an adder chain per mask. The node registers its outputs.

### Worked example (4 nodes, 4 bands, static priority)

Node IDs 0..3 have priorities 0..3.

* Node 0 has 4 flits for node 1.
* Node 2 has 2 flits for node 1.
* One cycle later, node 3 gets 2 flits for node 0.

| cycle | vectors n0 n1 n2 n3 | outcome | data on the bands |
|---|---|---|---|
| 0 | 0101 0000 0101 0000 | q=1: 0→1 gets bands 1–4; 2 loses (node 1 is taken) | – |
| 1 | 0000 0000 0101 0100 | q=2: 2→1 gets bands 1,3; 3→0 gets bands 2,4 | 0→1, four flits |
| 2 | 0000 0000 0000 0000 | – | 2→1 and 3→0, two flits each |

Eight flits move in two transfer cycles, using all 8 band-cycles. The longest
wait is one cycle (node 2). A one-band-per-pair scheme needs six cycles for
the same traffic. `tb_mrfi_noc` replays this example cycle by cycle.

## Priority adjustment (`mrfi_priority_map`)

A node's priority *is* its arbitration band. `prio_map[i]` gives the node at
priority *i*, and `node_prio[n]` is the inverse.

Each node keeps its own copy of the table. All copies are reset and stepped
together, so they always agree. Three modes:

* **static**: node *n* keeps priority *n*.
* **rotary**: every cycle the table rotates by one place. The highest-priority
  node drops to the lowest.
* **load**: `prio_load_en` loads any permutation, for other fairness schemes
  computed outside. Load wins over rotation.

Because every node sees the whole stream, such schemes can use global
information.

## Node (`mrfi_node`)

Blocks inside a node:

* **Priority table**: a `mrfi_priority_map`.
* **TX queue**: a `mrfi_flit_fifo`. It accepts up to M flits per cycle, each
  with its destination. It shows M+1 head entries, so the node can see the
  next request behind the flits it sends this cycle.
* **Send logic**: counts how many head flits share the granted destination.
  It sends `min(granted bands, that run)` of them.
* **RX buffer**: a second `mrfi_flit_fifo`. It stores `{source, payload}`.
* **fc logic**: `fc = (free − arriving this cycle) < M`. This guarantees room
  for a full cycle of arrivals next cycle.
* **Arbiter**: an `mrfi_stream_arbiter` plus the `TX_CH`/`RX_CH` registers.

If a pair is granted more bands than it has flits for that destination, the
spare bands stay idle in that cycle. The grant itself still covers all bands.

## Top level (`mrfi_noc`) and the line model (`mrfi_channel`)

`mrfi_noc` instantiates K nodes and two `mrfi_channel` models:

* one for the K arbitration bands (symbol = sub-stream vector);
* one for the M data bands (symbol = flit).

A node turns on the modulator of its own arbitration band only, and of the
data bands in its `TX_CH`. The model gives every receiver every band:
`rx_valid[b]` and `rx_data[b]`. It flags a band driven by two transmitters
(`collision`) and asserts that this never happens.

`mrfi_channel` is a behavioural stand-in for the analog path. It is
combinational and written so that tools accept it, but in a chip this is
RF circuitry, not logic.

Ports of the top, per node *n*:

* **Host TX**: `in_cnt[n]`, `in_dest[n][0..M-1]`, `in_data[n][0..M-1]`,
  `in_ready[n]`.
  * `in_ready` means there is room for M flits.
  * The first `in_cnt` entries are queued at the clock edge.
* **Host RX**: `out_cnt[n]` (up to M oldest flits visible),
  `out_src[n][k]`, `out_data[n][k]`, `out_pop[n]` (how many to remove).
* **Priority**: `prio_mode`, `prio_load_en`, `prio_load_map` (shared).
* **Observation**: `sub_vec`, `full_stream`, `tx_ch`, `rx_ch`, `lost`,
  `data_busy`, `collision`.

## Parameters

| parameter | default | origin |
|---|---|---|
| `K` nodes = arbitration bands | 16 | the scheme's sizing example: 16 nodes, 6-bit vectors |
| `M` data bands | 16 | design choice (the worked example uses M = K) |
| `FW` flit width | 32 | design choice |
| `TXQ_DEPTH`, `RXQ_DEPTH` | 32 | design choice; power of two; RX depth must be ≥ M |

Reset is synchronous and active low (`rst_n`). After reset:

* queues are empty;
* masks are clear;
* node *n* has priority *n*.

## What follows the scheme and what is this design's own

These follow the scheme:

* the sub-stream format;
* per-node priority bands and frequency-domain appending;
* the admission rule (flow control, one source per destination, stop at M
  pairs);
* the `p+1+jq` band allocation;
* one-cycle arbitration, with data in the next cycle;
* rotary and arbitrary priority adjustment.

These are this design's own choices:

* the band index order and the bit order inside masks: bit *c* = band *c+1*;
* the exact `fc` rule;
* the queue organisation and depths, and multi-flit host ports;
* flits laid on granted bands in ascending order;
* the source tag on received flits;
* one rotation step per cycle, and the load port;
* `M = 16`, `FW = 32`;
* the zero-delay line model.

Not built:

* the analog RF front ends and carrier generation;
* the one-band-per-pair RF-I baseline the scheme improves on;
* two extensions the scheme only suggests: a destination receiving from
  several sources at once, and broadcast.

Where the scheme's description is inconsistent, this design follows the
prose and the worked example:

* The printed pseudocode starts each pair's band list at `p+q` instead of
  `p+1`.
* The pseudocode leaves `p` undefined for losing nodes. Here they get empty
  masks.

## Verification

Each testbench is self-checking. It prints
`TB_RESULT checks=N failures=F` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_mrfi_stream_arbiter` | the six-band / three-pair allocation; both arbitration cycles of the worked example; a busy destination; 4000 random streams (8 nodes, 5 bands, random priority permutations) against an independent node-indexed reference model |
| `tb_mrfi_priority_map` | reset order, static hold, one-place rotation, loads, inverse table, against a model |
| `tb_mrfi_flit_fifo` | random multi-push/multi-pop against a queue model, full and empty reached |
| `tb_mrfi_channel` | per-band delivery from random owners, idle bands, collision flag |
| `tb_mrfi_node` | vector contents, losing, taking all bands and sending in order, listening only to granted bands, source tags, fc rising when the RX buffer fills and falling when drained |
| `tb_mrfi_noc` | the worked example cycle by cycle (vectors, masks, 8 flits in 2 cycles, 100 %, delivery order); then random traffic on 8 nodes / 4 bands with 8-entry buffers and rotary priority |
| `tb_mrfi_noc_full` | the default 16-node / 16-band configuration under random traffic with rotary priority |

The random-traffic scoreboard (`tb/mrfi_traffic.sv`) checks that:

* every flit arrives once, at the right node, with the right source tag, in
  order per pair;
* no band is ever driven twice;
* every cycle the granted bands are all M or none;
* every mechanism happened: a lost arbitration, several bands for one pair,
  several pairs sharing, flow control raised, rotary priority, and (when
  K > M) more requests than bands.

To run a testbench with Verilator 5, from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_mrfi_noc \
    -y rtl -y tb +libext+.sv -Irtl rtl/mrfi_pkg.sv tb/tb_mrfi_noc.sv
./obj_dir/Vtb_mrfi_noc +verilator+rand+reset+2
```

Use another `--top-module` and testbench file to run any other test.

### How far to trust it

* The arbitration logic is checked against an independent model over
  thousands of random cases, and against the worked example.
* The full network has been simulated at its default size and at two reduced
  sizes.
* Nothing here has been checked against real RF hardware. The line model
  assumes that a band delivers exactly what its single transmitter sent, in
  the same cycle.
