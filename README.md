# CONCAT neighbour-sampling accelerator

Sample-and-aggregate graph neural networks such as GraphSAGE do not aggregate over
a node's whole neighbourhood. For every node of a mini-batch they draw a few
neighbours at random, draw neighbours of those neighbours, and so on, hop by hop.
On a CPU this sampling can take longer than the rest of training, because every
hop goes back to the edge index with the results of the previous hop.

The CONCAT ("concatenate") sampler removes that dependency. Only 1-hop
neighbourhoods are ever sampled: every node v gets a small sampled graph
G(v,1) made of v and N sampled neighbours. A 2-hop computational graph for v is
then built by joining G(v,1) with the G(u,1) of each sampled neighbour u, and so
on for deeper graphs. The joining is cheap bookkeeping done by the host's data
loader. The expensive part, drawing N uniform neighbours for every node, is a
single sequential pass over the graph with no feedback, which suits hardware.

The RTL in this repository is that hardware. It is a uniform 1-hop neighbour
sampler that produces **one sampled neighbour ID per clock** and comes in two
forms:

* a **small-graph module**, for graphs whose lists fit in on-chip block RAM
  (Cora, Citeseer, PubMed). Sixteen of them run side by side, each on its own
  slice of the graph;
* a **streamed module**, for graphs that must stay in off-chip memory
  (NELL, ogbn-arxiv, Reddit). It receives one 1024-bit word per node.

The design follows the CONCAT sampler paper by Gui, Wei, Yuan and Jin ("Hardware
Acceleration of Sampling Algorithms in Sample and Aggregate Graph Neural
Networks"), which implemented it on a Virtex-7 FPGA at 250 MHz. That paper gives
the block structure, the 16-bit LFSR, the eight modulo units used in turn, the
1024-bit word of 56 × 18-bit neighbour IDs plus a degree, clipping to 56
neighbours, 15 neighbours per node and 16 parallel modules. The pipeline, the
handshakes, the memory depths, bit positions and corner cases were chosen for
this RTL. They are listed in [Departures and own choices](#departures-and-own-choices).

## How a graph is stored

The sampler stores no row-pointer array. There are two lists:

* the **degree list** holds one word per node, the node's degree, at address
  `x_d0 + i` for the i-th node;
* the **edge list** holds the second column of the edge index (the end-node IDs).
  It is sorted by start node, and each undirected edge appears once in each
  direction.

For the six-node example graph with degrees 4, 2, 1, 1, 2, 2, the edge list is
`1 2 3 4 | 0 5 | 0 | 0 | 0 5 | 1 4`. The neighbours of the i-th node begin at

```
x_e(i) = x_e0 + d_0 + d_1 + ... + d_(i-1)
```

so node 0 starts at `x_e0`, node 1 at `x_e0 + 4`, and so on. Nodes are always
sampled in order, so the base address is a running sum. After the last sample
of node i, `base_addr_unit` adds `d_i`.

## Drawing one sample

Every sample goes through three steps:

1. `lfsr16` supplies a 16-bit pseudo-random number `r`. It is a 16-register
   Galois LFSR with the maximal-length polynomial x^16+x^14+x^13+x^11+1, so it
   never produces 0.
2. `r mod d` gives an offset in `[0, d)`. In the streamed module the divisor is
   `min(d, 56)`.
3. The neighbour at `x_e(i) + (r mod d)` in the edge list is read out. The
   streamed module instead selects register `r mod min(d,56)` of the node's
   word.

The draw is uniform apart from the small bias of reducing a 16-bit number modulo
`d`. Samples are drawn with replacement, so the same neighbour can be drawn
twice.

## The parallel modulo group

A remainder by an arbitrary 16-bit divisor is too slow for one 250 MHz clock.
The published design solves this with eight slow units used in turn. That is
the part of the timing that takes the most care.

`modulo_unit` is a restoring divider that retires two dividend bits per clock.
A 16-bit dividend therefore takes 8 steps. The first step is taken on the edge
that captures the operands, so operands presented in clock n give a result in
clock n+8. `done` is high for exactly that clock, and the unit accepts new
operands in that same clock.

`parallel_modulo` places eight of these behind two round-robin pointers:

```
clock        n    n+1  n+2  ...  n+7  n+8  n+9  ...  n+15  n+16
input  to    U0   U1   U2   ...  U7   U0   U1   ...  U7    U0
output from                           U0   U1   ...  U7    U0
```

The write pointer (the "control signal") hands the operation of each clock to
the next unit. The read pointer (the "select signal") drives the output
multiplexer. Each unit's latency equals the number of units, so a unit always
becomes free in the clock in which its next turn comes. The group accepts one
operation per clock, returns each result exactly 8 clocks later and keeps the
order. A tag travels with every operation, and the samplers use it to carry the
base address, node index and flags past the 8-clock gap. A gap in the input
leaves the same gap in the output. Assertions check that no two units finish in
the same clock and that no operation reaches a busy unit.

## Small-graph module (`small_sampler`)

One module holds a degree list of 4096 entries, an edge list of 16384 18-bit
IDs and a result RAM of 4096 IDs, all written as arrays that map to block RAM.
The host loads the lists through plain write ports. It then pulses `start` with
the node count, `num_neighbors`, the list base addresses `x_d0` and `x_e0`, and
`first_node`, the global ID of the segment's first node, which is used only to
label outputs.

`sample_ctrl` steps through node i = 0..N-1 and sample k = 0..K-1, one request
per clock. Each request moves through the pipeline as follows:

| clock | stage |
|-------|-------|
| t     | degree list read at `x_d0 + i` |
| t+1   | degree arrives; LFSR value, degree and base `x_e(i)` enter the modulo group; after the node's last request the base moves on by `d_i` |
| t+9   | remainder leaves the group; edge list read at `x_e(i) + rem` |
| t+10  | `out_valid`, `out_nbr_id`, `out_node_id`; the ID is also appended to the result RAM |

Successive nodes follow each other with no gap. A run of N nodes with K
neighbours gives its first sample 11 clocks after `start`, its last sample
N·K − 1 clocks after that, and `done` one clock later. A node of degree 0 has
nothing to sample. Its K slots come out as `out_skip` pulses, so the output
timing does not change. The result RAM keeps the first 4096 IDs of a run and
raises `res_overflow` if more arrive. The output port always carries every
sample.

## Streamed module (`large_sampler`)

The input is one 1024-bit word per node, delivered in node order with a
valid/ready handshake:

```
bits [18k+17 : 18k]   neighbour k, k = 0..55   (18-bit node IDs, enough for 2^18 nodes)
bits [1023 : 1008]    degree d                 (16 bits)
```

A node with more than 56 neighbours is sampled among its first 56 only. The
published accuracy results for Reddit show no loss from this. Each request takes
the LFSR value, reduces it modulo `min(d,56)` in the parallel modulo group and,
8 clocks later, uses the remainder to select one of 56 registers
(`neighbor_reg_bank`). `out_clipped` marks samples of clipped nodes.

The remainder for a node's last request arrives 8 clocks after that request.
By then the next node's requests are already being issued, so the next node's
word must be stored while the current node's registers are still being read.
This RTL therefore has **two register banks**, filled alternately. A word is
accepted (`in_ready`) when the node's first request is issued and a bank is
free. The bank is released when the node's last sample leaves. With K ≥ 9
(K = 15 in the published experiments) and a source that keeps up, no clock is
lost between nodes. For smaller K, or while the source has no word ready, the
controller stalls and the output shows gaps. The samples are correct either
way. The first sample leaves 10 clocks after `start`.

## Sixteen modules in parallel (`concat_sampler_top`)

The host cuts the degree list and the edge list into segments of consecutive
nodes, one segment per module. Each module's own base addresses point at its
segment. Every module samples its segment independently, with its own LFSR
seed. The 16 output streams, read one after another in module order, make up the
sample result for the whole graph, because each segment's samples are already
in node order.

The top also contains the streamed module, with its own ports (`lg_*`). The two
engines share only clock and reset. `num_neighbors` is common to all. The top
has no interface ports: each small module's signals are unpacked arrays indexed
by module (`sm_*[m]`).

## Sizes and throughput

At one sample per clock and 15 neighbours per node, one module needs N × 15
clocks for N nodes. At 250 MHz this gives:

| graph | nodes | edge-list entries (2 × undirected edges) | where it fits | clocks | time |
|-------|------:|------:|---------------|-------:|-----:|
| Cora | 2,708 | 10,858 | one small module | 40,620 | 0.162 ms |
| Citeseer | 3,327 | 9,464 | one small module | 49,905 | 0.200 ms |
| PubMed | 19,717 | 88,676 | 16 modules, ≈1,233 nodes / 5,542 edges each | 18,495 per module | 0.074 ms; 1.183 ms if one module took all 19,717 nodes |
| NELL | 65,755 | 503,100 | streamed | 986,325 | 3.945 ms |
| ogbn-arxiv | 169,343 | 2,332,486 | streamed | 2,540,145 | 10.16 ms |
| Reddit | 232,965 | 114.6 M | streamed | 3,494,475 | 13.98 ms |

The times in the last column match the hardware sampling times published for
the FPGA implementation (the PubMed figure there is the one-module time).
The Cora, Citeseer, NELL, ogbn-arxiv and Reddit figures are reproduced exactly in
simulation (see below); PubMed is simulated spread over all 16 modules
(18,495 clocks each). The streamed rows assume that off-chip memory delivers
one word every 15 clocks, i.e. 1024 bits per 60 ns or about 2.1 GB/s. The
per-module result RAM (4096 IDs) is smaller than a whole-graph run; the output
port is the path for full runs.

## Departures and own choices

* **Base address of node 0.** One formula in the published text sums degrees
  up to and including node i. The published sampling diagram places node 0's
  neighbours at `x_e0` itself. The RTL follows the diagram, with the sum over
  the nodes before i.
* **Degree-list address** is `x_d0 + i` (node index as offset, as the text
  says in words), not the `x_d0 + d_i` of one printed equation.
* **LFSR polynomial and seeding** are not given. The RTL uses the polynomial
  above, reset to a `SEED` parameter, with a `seed_we` port. Each small module
  of the top derives a different default seed.
* **Modulo unit insides** are not given, only its 8-clock turn. The RTL uses a
  2-bit-per-clock restoring divider.
* **Two register banks** in the streamed module. The published figure shows
  one set of 56 registers. A second set is the simplest way to reach the
  published gap-free rate with an 8-clock modulo latency.
* **Degree-0 nodes** (not covered in the published text) give `out_skip`
  slots.
* **Memory depths** (4096 / 16384 / 4096 per module), the word's bit positions,
  the valid/ready input, the host write ports, the output labelling with global
  node IDs and the result RAM's overflow rule were all chosen for this RTL.
* **Both engines in one top.** The published design picks one engine per
  dataset size.
* **Not included:** the off-chip DDR memory and its controller (the streamed
  module's `lg_in_*` ports are where they connect) and the CONCAT joining of
  1-hop samples into deeper graphs, which runs on the host.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench works out
the expected values on its own: a bit-level LFSR model, `%`, prefix sums over
its own copy of the graph, and field-by-field word construction. It prints
`TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_lfsr16` | every state against the recurrence, period 65,535, seeding |
| `tb_modulo_unit` | 3,000 remainders, result in clock n+8 exactly |
| `tb_parallel_modulo` | 5,000 operations with gaps: order, tags, 8-clock latency, bursts of one per clock |
| `tb_degree_list_ram`, `tb_edge_list_ram` | full fill, random reads, read latency, hold |
| `tb_base_addr_unit` | the six-node example above, then 5,000 random degrees with wrap |
| `tb_sample_ctrl` | request order, flags, one per clock, stalls, empty runs |
| `tb_result_ram` | append order, count, overflow, clear |
| `tb_neighbor_reg_bank` | all 56 fields and the degree of 50 random words |
| `tb_small_sampler` | every sample, skips, 11-clock latency, gap-free output, result RAM, reseeding |
| `tb_large_sampler` | every sample, clipping, skips, gap-free at K = 15, stalls at K = 3 and with a gappy source |
| `tb_concat_sampler_top` | whole design at default size: Cora- and then PubMed-sized graphs over the 16 modules, concatenated result compared with a whole-graph prediction, result RAM read back (and overflowing on PubMed), plus 400 streamed nodes; counts skips, clips, stalls, overflows and modulo-unit turns |
| `tb_workload_small` | one module on Cora-, Citeseer- and PubMed/16-sized graphs, exact clock counts |
| `tb_workload_large` | the streamed module on NELL-, ogbn-arxiv- and Reddit-sized graphs (65,755, 169,343 and 232,965 nodes), 7.02 M samples checked, exactly 3.945, 10.161 and 13.978 ms at 250 MHz |

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/concat_pkg.sv tb/tb_small_sampler.sv --top-module tb_small_sampler
./obj_dir/Vtb_small_sampler
```

Use the same command for any other testbench. Each one runs in seconds; the three
streamed workloads together take about 7 s. All memories are inferred arrays with
one registered read port and one write port, so an FPGA flow maps them to block
RAM.

## Files

`rtl/concat_pkg.sv` holds the shared constants, types and word layout. The
modules, bottom-up, are `lfsr16`, `modulo_unit`, `parallel_modulo`,
`degree_list_ram`, `edge_list_ram`, `base_addr_unit`, `sample_ctrl`,
`result_ram`, `small_sampler`, `neighbor_reg_bank`, `large_sampler` and
`concat_sampler_top`. Each file opens with a description of its behaviour,
interface and timing.
