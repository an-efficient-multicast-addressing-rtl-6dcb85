# Hierarchical bit string multicast NoC for a 16-core neuromorphic processor

A spiking neuron usually has synapses in several cores. Every spike therefore
has to reach a *set* of cores, and the network header must say which. Two
classic answers are costly:

* a **flat bit string** (one header bit per core, 16 bits for 16 cores) is
  exact, but the header grows linearly with the core count;
* a **symbol string** (0/1/* per address bit, 8 bits for 16 cores) is short,
  but can only name "hypercube" regions, so many cores get spikes they do not
  want and must filter them.

The **hierarchical bit string (HBS)** keeps the short header and names many
more sets. The cores sit at the leaves of a tree of switches with 4 children
per switch. The header carries one 4-bit mask per tree level:

| field | width | meaning |
|---|---|---|
| `r1` | 4 | which clusters (R1 switches) the spike goes to |
| `r0` | 4 | which cores (down ports) inside *every* selected cluster |
| `tag` | 10 | source neuron: `{core id[3:0], local neuron[5:0]}` |

The 18-bit packet `{r1, r0, tag}` travels as one word on parallel wires. For 16
cores HBS uses 8 routing bits, like the symbol string, and can name
(2^4-1)^2 = 225 multicast trees instead of 3^4 = 81.

The tree reaches the product set "every selected core of every selected
cluster". A target set that is not such a product is covered by the smallest
product containing it, and the extra cores throw the spike away in a filter
table. Because the second level is always exact, an unwanted copy is only
created below an R1 switch, on a short local link.

## Topology

```
                        R2  (4 ports, port c = cluster c)
        _______________/ | | \________________
       /                 |  |                 \
   R1 c=3            R1 c=2  R1 c=1           R1 c=0     (5 ports: D0..D3, Up)
  / | | \            / | | \  ...             / | | \
 15 14 13 12       11 10 9  8                3  2  1  0  cores (id = 4c + j)
```

Core `j` of cluster `c` has id `4c+j` and hangs on down port `D_j`. In every
mask, bit `i` stands for child `i`, and higher bits are drawn to the left, so
a mask reads like the row of children it selects.

## Relative cluster mask and bit rotation (the subtle part)

All R1 switches must run identical logic, yet a switch does not know where it
is. So `r1` is **relative**: when a packet leaves its source, `r1[3]` is the
source's own cluster and `r1[2:0]` are the other clusters, in the order met
when walking right from the source with wrap-around. With that, every R1
switch routes a packet from one of its cores with the same four equations:

```
Up  = r1[2] | r1[1] | r1[0]        some other cluster is a target
D_j = r1[3] & r0[j]                own cluster is a target and core j is selected
```

Formally, with `rotl(x, n)` a left rotation of a 4-bit mask:

* source side (encoder, cluster `s`): `r1 = rotl(cluster_mask, 3 - s)`;
* R2 input from cluster `s`: `abs = rotl(r1, s + 1)` gives the absolute mask;
* R2 routing: forward to every cluster `c` with `abs[c]`, except `c = s`
  (already served by its own R1); this level is exact;
* R2 output to cluster `c`: `r1' = rotl(abs, 3 - c)`, so that `r1'[3] = 1`
  means "this cluster" to the receiving R1, which then applies the same
  `D_j` equations.

All rotations are fixed per port, so they are wiring, not logic. One more
rule is needed: a packet that came down from R2 is never sent Up again, even
though its `r1[2:0]` may still name other clusters.

Example (source core 8, i.e. cluster 2, targets: core 1 of clusters 3, 2 and
0, cores 13, 9, 1). Absolute cluster mask `1101`, rotated by 3-2 = 1:
`r1 = 1011`; `r0 = 0010`. R1 of cluster 2 delivers to D1 (core 9) and sends
Up; R2 rotates back to `1101` and forwards to clusters 3 and 0, giving each
`r1'` with bit 3 set; they deliver to their D1. No filtering is needed. If
instead core 4 targets cores 15, 14, 11, 7, 3, 2, the product set also holds
cores 10 and 6; their filters discard the spike.

`r0` is never rotated: it is the same absolute core mask in all clusters.

## Blocks

| module | role |
|---|---|
| `hbs_pkg` | packet struct `pkt_t`, sizes (K=4, 16 cores, 10-bit tag), `rotl` |
| `hbs_encoder` | target set (16 bits) + source cluster -> `{r1, r0}`, and `exact` (no filtering needed) |
| `hbs_src_lut` | per core, one routing entry per neuron (40); a spike becomes a packet |
| `hbs_filter_lut` | per core, 1024 x 1-bit accept table indexed by the tag; accepted tags go to the core, others pulse `drop` |
| `hbs_fifo` | 4-word input buffer of each switch port |
| `hbs_rr_arbiter` | round-robin arbiter per switch output, holds its grant while the output is stalled |
| `hbs_switch_core` | buffered multicast crossbar: forks a packet to all outputs in its mask |
| `hbs_r1_route`, `hbs_r2_route` | the routing equations above |
| `hbs_r1_switch`, `hbs_r2_switch` | the two switch levels (R2 adds the rotation wiring) |
| `hbs_noc_top` | 16 source LUTs, 16 filters, 4 R1, 1 R2, one encoder on the programming port |

### Multicast switch

Each input buffer shows its head packet to the level's routing logic, which
returns an output mask. Each output arbitrates round-robin among the inputs
whose head still needs it. Outputs serve a packet independently: a per-input
`served` mask records which outputs have taken the head, and the buffer pops
when the last one does. A blocked output therefore never blocks the other
branches of the tree. A head with an empty mask (a neuron with no targets) is
discarded. Outputs are driven from the buffer heads: a switch costs one clock
cycle when nothing is blocked.

### Interfaces and timing

Every link uses valid/ready: a word moves on a clock edge where both are high,
and a refused word must be held unchanged (checked by assertions in
`hbs_fifo` and `hbs_switch_core`). Reset is asynchronous and active low; it
empties all buffers and clears the filter tables (every core then rejects
everything). The source LUT is not reset.

Latency without contention, counted from the clock edge that takes a spike to
the cycle in which `evt_valid` is high: 2 cycles to a core of the same cluster,
4 cycles to another cluster. Throughput: one packet per cycle per link.

### Programming

`hbs_noc_top` has one write port for all tables:

* `cfg_src_we`, `cfg_core`, `cfg_nrn`, `cfg_targets` writes the multicast
  tree of one neuron; the encoder converts the flat target set relative to
  `cfg_core`'s cluster, and `cfg_exact` tells whether the set is reachable
  without filtering;
* `cfg_flt_we`, `cfg_core`, `cfg_tag`, `cfg_accept` sets one accept bit of one
  core's filter. Program `accept = 1` for every source that really targets the
  core; leave the rest 0.

## Parameters

| parameter | default | where |
|---|---|---|
| `K` | 4 children per switch | `hbs_pkg` (the routing equations assume 4) |
| `NEURONS` | 40 neurons per core | `hbs_noc_top`, `hbs_src_lut` |
| `DEPTH` | 4 words per input buffer | `hbs_noc_top`, switches, `hbs_fifo` |
| `TAG_W` | 10 | `hbs_pkg` |

The sizes 4, 16, 40, 10 and 8 routing bits come from the evaluated system:
a 16-core NoC running a spiking network of 3 recurrent and 3 fully connected
layers of 100 neurons (600 neurons, at most 40 per core), which fits this
configuration. The buffer depth, handshake and reset are this design's own.

## Where this design makes its own choices

* **Switch micro-architecture.** The evaluated switches reuse an existing
  router design that is not described; the buffered crossbar with
  independent forking and round-robin arbitration here is the simplest one
  that implements tree multicast.
* **R2 routing.** Only the R1 equations are given explicitly; the R2 rule
  (exact, rotate back, skip the arrival cluster) and the re-rotation on R2's
  outputs are derived from the relative-addressing description.
* **No U-turn** at R1 for packets coming from R2.
* **R2 has 4 ports.** The evaluated switches all have 5 ports; with only two
  levels R2's fifth (upward) port would have nothing to connect to and no
  routing rule, so it is left out.
* **`r0` is absolute.** One of the two worked examples in the original
  drawing prints an `r0` value that only fits a rotated core mask, while the
  other example, the overview drawing and the printed `D_j` equations use an
  unrotated mask; the unrotated form is implemented.
* **Filter** as a directly indexed accept table (a CAM with one entry per
  wanted source would give the same decisions with less storage).
* **Tag layout** `{core, local neuron}` and the programming port.
* The neural cores and the physical links are not part of the RTL: spikes
  enter on `spike_*`, accepted events leave on `evt_*`.

## Verification

Each module except the arbiter (covered through the switch tests) has a
self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. A shared reference model
(`tb/tb_hbs_ref_pkg.sv`) computes the encoding and the reached cores from
the tree description, independently of the RTL's rotation helper.

* `tb_hbs_encoder`: all 2^16 target sets from all 4 clusters, plus the
  worked examples.
* `tb_hbs_r1_route`, `tb_hbs_r2_route`: exhaustive.
* `tb_hbs_fifo`, `tb_hbs_src_lut`, `tb_hbs_filter_lut`, `tb_hbs_switch_core`,
  `tb_hbs_r1_switch`, `tb_hbs_r2_switch`: random traffic with random
  back-pressure against scoreboards, plus latency checks.
* `tb_hbs_noc_top`: the full design at default parameters. Programs all 640
  neurons with mixed target sets, runs the worked examples (drops exactly at
  cores 10 and 6), checks the 2/4-cycle latencies, then 20,000 cycles of random
  spikes with back-pressure phases. Every wanted event must arrive exactly
  once and every core must drop exactly the predicted number of copies. It
  also counts forks, R2 traversals, local-only trees, drops, stalls, output
  contention at R1 and R2, suppressed U-turns and empty trees, and fails if
  any never happened.

* `tb_hbs_nav_workload`: the shape of the evaluated workload, 600 neurons in
  6 layers of 100 (3 recurrent, then 3 fully connected), mapped in order onto
  the 16 cores with at most 40 per core and random early core switches. Each
  neuron projects to all neurons of the next layer, and in a recurrent layer
  also to its own layer; these projections are an assumption, as is the
  activity: 400 time steps in which each neuron fires with probability 1/16,
  since the original spike trace is not available. All deliveries and drops
  are checked. The testbench also counts the unwanted copies a 0/1/* symbol
  header would have caused for the same spikes: with seed 1, 35,404 for HBS
  against 68,536 for symbols (52 %). The original evaluation, on real
  activity and mappings, found under 30 %; the difference comes from the
  assumed dense connectivity, under which most trees span many clusters.

Run one with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/hbs_pkg.sv tb/tb_hbs_ref_pkg.sv $(ls rtl/*.sv | grep -v hbs_pkg) \
    tb/tb_hbs_noc_top.sv --top-module tb_hbs_noc_top -o sim
./obj_dir/sim
```

The packages go first so that they are compiled before their users.
