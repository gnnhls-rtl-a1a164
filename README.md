# GNN inference kernels in SystemVerilog

This is register-transfer logic for one layer of six graph neural network (GNN)
models: GCN, GraphSage, GIN, GAT, MoNet and GatedGCN. It follows the GNNHLS
benchmark (Zhao et al., "GNNHLS: Evaluating Graph Neural Network Inference via
High-Level Synthesis"), which builds these layers as dataflow kernels with
Vitis HLS for an Alveo U280 card. That work describes each kernel as a chain of
streaming stages. This RTL builds those chains directly in SystemVerilog, one
kernel per model, at the feature sizes evaluated in that work.

Every kernel solves the same problem. The input is a graph and a feature
vector `h_j` per vertex, plus the learned weights of one layer. For each target
vertex `i`, the kernel gathers the features of its incoming neighbours `N(i)`,
combines them, projects them through weight matrices and writes the new vector
`h_i'`. The models differ in how neighbours are weighted:

| model    | layer computed                                                                 |
|----------|--------------------------------------------------------------------------------|
| GCN      | `h_i' = ReLU(U · Σ_j h_j)`                                                     |
| GraphSage| `h_i' = ReLU(V h_i + W · mean_j h_j)`                                          |
| GIN      | `h_i' = ReLU(U · ReLU(V · ((1+ε) h_i + Σ_j h_j)))`                            |
| GAT      | `h_i'[k] = ELU(Σ_j softmax_j(LeakyReLU(a_src·z_i[k] + a_dest·z_j[k])) · z_j[k])`, with `z = U h` |
| MoNet    | `h_i' = ReLU(Σ_k U_k Σ_j w_k(u_ij) h_j)`, with `u_ij = tanh(V·pseudo_ij + v)` and Gaussian `w_k` |
| GatedGCN | `e_ij' = E h_i + D h_j + C e_ij`; `h_i' = ReLU(A h_i + Σ_j B h_j ⊙ σ(e_ij') / (Σ_j σ(e_ij') + ε))` |

GCN, GraphSage and GIN weight all neighbours equally ("isotropic"). GAT,
MoNet and GatedGCN compute a weight per edge ("anisotropic"). That per-edge
weight is where most of the design effort goes.

## The neighbour walk

The graph is stored in compressed sparse row (CSR) form over incoming edges:
- `ptr[0..N]` holds the row pointers.
- `col[e]` holds the source vertex of edge `e`.
- The neighbours of `i` are `col[ptr[i] .. ptr[i+1]-1]`.

Each kernel starts with `csr_nbr_reader`, which covers the two stages the
source names "CSR Ptr" and "Nbr Idx". It reads the two pointers of a vertex,
then one index per edge. It emits one beat per edge:

```
{node i, edge e, neighbour j, degree, last, empty}
```

`last` marks the final edge of a vertex. A vertex with no neighbours still
emits a single beat, with `empty = 1` and `last = 1`, so every later stage sees
exactly one end-of-vertex marker per vertex. Every vertex in the range
therefore produces an output. Aggregations treat the empty marker as "add
nothing": the sum is zero, the mean is zero, and the softmax has no terms.

All stages are joined by valid/ready streams. A beat moves when both are high.
A producer holds its beat, unchanged, until it is taken, and assertions check
this on the reader. Back-pressure travels backwards through every stage. A
VMM busy with the previous vertex stops the neighbour walk until it is free.

Two paths run side by side in kernels that need the target's own vector
(GraphSage, GIN, GatedGCN):
- `node_seq` issues `i` to a `vec_reader` for `h_i`.
- The neighbour walk produces the aggregate.

Both paths visit vertices in the same order. A combine stage takes one result
from each and pairs them without further matching.

## Memory interface

The off-chip memory is not part of the RTL. Every kernel brings out plain
ports:

- read port: `*_rd_en`, `*_rd_addr` (32 bit), `*_rd_data`. Data is valid one
  cycle after `rd_en`, and the port never stalls.
- write port: `*_wr_en`, `*_wr_addr`, `*_wr_data`. It always accepts.

A memory word holds a whole feature vector (`d × 32` bits, element `k` in bits
`32k+31 : 32k`), so one access fetches a vector. The HLS design instead uses
bursts of length `d` on a narrower bus. A memory system of any width can sit
behind these ports if it adds a ready signal. The stages already tolerate
stalls on their outputs, but not yet on memory reads.

Word layouts that are this design's own:

| word         | content                                                                  |
|--------------|--------------------------------------------------------------------------|
| GAT `z`      | `K·F` values; head `k` at elements `k·F .. k·F+F-1`                       |
| GAT score    | `el[0..K-1]` (`a_src·z`) at elements `0..K-1`, `er[0..K-1]` (`a_dest·z`) at `K..2K-1` |
| MoNet pseudo | 64 bits per edge: `pseudo[0]` (target-degree term) in bits 31:0, `pseudo[1]` in 63:32 |
| GatedGCN e   | `d` values per edge, addressed by the CSR edge index                     |

## Number format

All arithmetic is IEEE-754 single precision, as in the source design. The
package `gnn_pkg` supplies add, subtract, multiply, divide and integer
conversion as combinational functions. They flush subnormals to zero, round to
nearest with ties away from zero, saturate to infinity and produce no NaN.
The transcendental functions are built from those operators:
- `exp(x)`: written as `2^n · 2^f` with `n = floor(x·log2 e)`. `2^f` comes from a
  degree-5 least-squares polynomial on `[0,1)`, with relative error about 1e-7.
- `sigmoid(x)`: `1/(1+exp(-x))`.
- `tanh(x)`: `2·sigmoid(2x) − 1`.
- ELU and LeakyReLU, with LeakyReLU slope 0.2.

The operators are not pipelined. A stage that calls `fp_exp` therefore holds a
long chain of adders and multipliers in one cycle. For a clocked FPGA or ASIC
build, these functions are the first thing to pipeline. The stream handshakes
already allow extra latency in any stage.

## The VMM unit

`vmm` multiplies an input vector of `DIN` elements by a stored `DOUT × DIN`
matrix. In each cycle it:
1. takes one input element `x[c]`;
2. multiplies it by column `c` with `DOUT` multipliers;
3. adds the products into `DOUT` accumulators.

A vector is accepted when the unit is idle. Its result appears `DIN+1` cycles
later and is held until taken. The matrix is written one element at a time:
`w_row` is the output index and `w_col` the input index. The source reaches a
new vector every `d+36` cycles by splitting the multiply and the sum into two
HLS functions. The column-serial form here has a similar rate with one
multiply-add per output lane.

## The kernels

### GCN (`gcn_kernel`, `gcn_cu`)
The chain is walk, then read `h_j`, then Agg (sum), then VMM `U`, then ReLU,
then write. The kernel holds two compute units, as the source does for GCN.
- Unit 0 takes the lower half of `[node_begin, node_end)` and unit 1 the upper half.
- Each unit has its own memory ports (port arrays index `[0]` and `[1]`).
- Each unit has its own copy of `U`; a weight write loads both.

### GraphSage (`graphsage_kernel`)
The weight `[V W]` is split, so the target path and the neighbour path run in
parallel:
- target path: read `h_i`, then VMM `V`;
- neighbour path: walk, then read `h_j`, then sum, then multiply by `1/count`, then VMM `W`.

A final stage adds the two results, applies ReLU and writes. Parameter select
`w_sel`: 0 = `V`, 1 = `W`.

### GIN (`gin_kernel`)
The chain has these steps:
1. The neighbour sum runs next to the read of `h_i`.
2. A combine stage forms `(1+ε)h_i + Σh_j`.
3. Two cascaded VMMs follow, each with a ReLU.

The formula applies `V` first and `U` second, and this design follows the
formula. The source's diagram and prose name the two VMMs in the order U, V,
which only swaps the names of the matrices. `w_sel`: 0 = `U`, 1 = `V`, 2 = `ε`.

### GAT (`gat_kernel1`, `gat_kernel2`)
The softmax over a vertex's edges needs its denominator before any edge can be
weighted. Vertices can have thousands of edges, so buffering them on chip is
not an option. As in the source, the layer is split into two kernels that
communicate through memory.

`gat_kernel1` works per vertex `n`:
- It computes `z_n = U h_n` for all `K` heads of `F` elements.
- It computes the two per-head attention terms `el_n[k] = a_src[k]·z_n[k]` and
  `er_n[k] = a_dest[k]·z_n[k]`.
- It writes `z_n` and the score word.

This moves the projection from the edges to the vertices: `U h_j` is computed
once per vertex, not once per edge. Its parameters:
- `w_sel` 0 = `U`;
- `w_sel` 1 = `a_src[w_col]`;
- `w_sel` 2 = `a_dest[w_col]`, with `w_col = k·F + f`.

`gat_kernel2` computes, per target `i`, `e_ij[k] = LeakyReLU(el_i[k] + er_j[k])`.
It does this twice over the neighbour list, because the source also computes
`e_ij` twice:
- **Pass 1** reads each neighbour's score word, computes `exp(e_ij)` and adds it
  into the per-head denominator.
- **Pass 2** reads the score word and `z_j` again. It recomputes `e_ij`, forms
  `α_ij = exp(e_ij)/denominator` and accumulates `α_ij · z_j` per head.

A final cycle applies ELU and writes the `K·F` outputs, heads concatenated.
Nothing per edge is stored. The cost is a second read of each score word.
The source runs the two computations of `e_ij` as concurrent dataflow stages.
Here one controller runs them one after the other. The schedule is exact:
5 cycles per vertex plus 3 per edge and pass, i.e. `5·N + 6·E` cycles.

The softmax does not subtract a running maximum. Scores of ordinary trained
models stay far from fp32 overflow (`exp` saturates above `x ≈ 88`). A
model with larger scores needs a third pass for the maximum.

### MoNet (`monet_kernel`, `monet_cu`)
The kernel holds two compute units with a midpoint split, as in GCN. The
per-edge work of a unit is done in one combinational stage, one edge per cycle:
1. `u_ij = tanh(V·pseudo_ij + v)`, giving 2 values.
2. `w_k = exp(−½ Σ_d (u_ij[d] − μ_k[d])² · σ⁻¹_k[d])` for each of the `K` kernels.
3. `w_k · h_j` is accumulated into `K` sums.

The sums are stacked into one vector of `K·DIN` elements. After the vertex's
last edge, one VMM of `K·DIN` inputs computes `Σ_k U_k g_k`. The source uses
the same order, with the multi-head VMM after the aggregation, because it
moves the projection from every edge to every vertex. ReLU and write follow.

The inverse covariance is a `K × 2` array, used as a diagonal, with its values
as given. Parameter map:
- `w_sel` 0 = `U` (`w_row` output, `w_col = k·DIN + input`);
- `w_sel` 1 = `V[w_row][w_col]`;
- `w_sel` 2 = `v[w_col]`;
- `w_sel` 3 = `μ[k=w_row][d=w_col]`;
- `w_sel` 4 = `σ⁻¹[k][d]`.

### GatedGCN (`gatedgcn_kernel`)
Five VMMs run in parallel:
- the vertex path reads `h_i` into VMMs `A` and `E`;
- the edge path reads `e_ij` into VMM `C`, and `h_j` into VMMs `D` and `B`.

The soft-attention stage takes one edge from `C`, `D` and `B`, pairs it with
the `A` and `E` results of the current vertex, writes `e_ij'` back to edge
memory, and accumulates the numerator `Σ B h_j ⊙ σ(e_ij')` and the denominator
`Σ σ(e_ij')`. At the last edge it divides element by element (with
`ε = 1e-6`), adds `A h_i`, applies ReLU and writes. A vertex without edges
gets `ReLU(A h_i)`. `w_sel` 0..4 = `A, B, C, D, E`.

## Top level (`gnnhls_top`)

The top places all seven kernels side by side at the evaluated sizes:

| kernel       | index | defaults                         |
|--------------|-------|----------------------------------|
| GCN          | 0     | `D_GCN = 128`, 2 units           |
| GraphSage    | 1     | `D_GS = 128`                     |
| GIN          | 2     | `D_GIN = 128`                    |
| GAT kernel 1 | 3     | `GAT_DIN = 128, GAT_K = 8, GAT_F = 16` |
| GAT kernel 2 | 4     | same                             |
| MoNet        | 5     | `MN_DIN = 64, MN_K = 2, MN_DOUT = 64`, 2 units |
| GatedGCN     | 6     | `GG_D = 32`                      |

Control signals:
- `start[6:0]` and `done[6:0]` are indexed as above. A start pulse runs the
  kernel over `[node_begin, node_end)`. Its done bit stays high until the
  next start.
- The parameter bus is `prm_we`, `prm_kernel`, `prm_sel`, `prm_row`, `prm_col`
  and `prm_data`. It writes one fp32 weight into the kernel given by
  `prm_kernel`, using that kernel's `w_sel` map above.
- Memory ports carry a prefix per kernel: `gcn_`, `gs_`, `gin_`, `gat1_`,
  `gat2_`, `mn_` and `gg_`. The two-unit kernels have arrays `[2]`.

The two GAT kernels meet only through memory. The system must map `gat1_z_wr`
and `gat1_s_wr` onto the same storage that `gat2_z_rd` and `gat2_s_rd` read.

## How far this follows the source, and where it departs

Taken from the source:
- the six layer equations;
- the stage structure of each kernel: CSR Ptr, Nbr Idx, memory reads, Agg,
  VMM, activation and write;
- two compute units for GCN and MoNet;
- GraphSage's split weight and parallel paths;
- GIN's cascaded VMMs;
- the two GAT kernels with intermediate results in memory, and `e_ij` computed twice;
- MoNet's projection after aggregation;
- GatedGCN's five parallel VMMs;
- fp32 arithmetic;
- the feature sizes.

This design's own choices:
- the stream protocol and the empty-vertex marker;
- whole-vector memory words and one-cycle memory;
- the column-serial VMM;
- the midpoint split between compute units;
- running GAT's two passes in sequence;
- the LeakyReLU slope of 0.2 and GatedGCN's `ε = 1e-6`;
- the GAT score word layout and the MoNet pseudo layout;
- the parameter bus;
- no softmax maximum;
- the rounding mode.

Cycle counts are this design's. They do not reproduce the initiation
intervals the source reports for its HLS build, for example `4|N_i|+2` for
GCN aggregation. Those depend on the Vitis schedule and the HBM interface.

Not built:
- the HBM/DDR memory system and its controllers;
- the host program;
- the software that trains the models and produces the data.

`pseudo_ij = (deg_i^−½, deg_j^½)` is expected precomputed in memory, as a
per-edge input.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one:
- builds random inputs with `$urandom`;
- computes the expected result in `real` arithmetic;
- compares every written vector within a tolerance, typically 1e-3 relative;
- ends with a `TB_RESULT checks=N failures=M` line;
- has a watchdog.

`tb_pkg` holds the shared helpers. These include fp32/real conversion and a
CSR test graph in which every fourth vertex has no neighbours.

The block testbenches shrink the feature sizes for speed. They also check
these properties:
- the reader's cycle schedule;
- the read stage's rate;
- the VMM latency of `DIN+1`;
- GAT kernel 2's exact `5·N + 6·E` count;
- that each compute unit writes only its half of the range.

`tb_gnnhls_top` runs the whole top with every parameter at its default, on a
10-vertex graph:
1. It loads all weights over the parameter bus.
2. It runs the seven kernels in turn. GAT kernel 1's outputs are fed back to
   kernel 2 from the testbench memory.
3. It checks 7534 output values.

It also counts how often each mechanism occurs, and fails if one never does:
- empty vertices;
- work in the second GCN and MoNet unit;
- VMM back-pressure on the neighbour stream;
- the second GAT pass;
- the GAT hand-over;
- GatedGCN edge write-back.

`tb_gcn_workloads` runs the GCN kernel at `d = 128` on four 8-vertex graph
segments. Their degree profiles mimic the four evaluation graphs:
- MOLTOX21: degree at most 6, average about 2.
- MOLHIV: degree at most 10, average about 2.
- ARXIV: power-law, with one hub of 300 neighbours.
- PROTEINS: average degree near 600.

It checks every output value and a loose bound on the run time of each
segment. The full graphs have up to a million vertices and 79 million edges.
The kernels can address them, with 32-bit vertex and edge indices and nothing
on chip that grows with the graph, but they are far too large to simulate.

To run a testbench with plain Verilator 5 (`gnn_pkg` first):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_gatedgcn_kernel \
    rtl/gnn_pkg.sv $(ls rtl/*.sv | grep -v gnn_pkg) tb/tb_pkg.sv tb/tb_gatedgcn_kernel.sv
./obj_dir/Vtb_gatedgcn_kernel +verilator+rand+reset+2
```

The block testbenches finish in seconds. `tb_gnnhls_top` takes a couple of
minutes to compile, because of the 128-lane fp32 VMMs, and seconds to run.
To change a size, override the kernel's parameter in its testbench. The
reference models are generic in every size.
