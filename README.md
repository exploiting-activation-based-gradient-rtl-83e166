# A sparse CNN training accelerator that skips gradients ReLU will discard

During training, a ReLU layer zeros every feature whose pre-activation was
not positive. In the backward pass, the same ReLU multiplies the incoming
gradient by its derivative, and that derivative is zero at exactly those
positions. So the gradient map *leaving* a CONV layer in the backward pass
has the same zero pattern as the feature map that layer produced in the
forward pass. That pattern is known before the backward CONV starts.

This design uses the fact. The forward pass stores a one-bit-per-output
**bitmap** next to every result. In the backward pass, a gradient whose
bitmap bit is zero is never computed: this is *output sparsity*. Separately,
zero *inputs* are skipped through per-chunk lists of non-zero offsets: this
is *input sparsity*. The two savings multiply. Sparsity is uneven across the
image, so some processing elements finish early. A **work redistribution
unit** then hands half of the busiest element's remaining outputs to an idle
one.

The RTL is SystemVerilog-2017 and synthesizable. It simulates with plain
Verilator. Arithmetic is IEEE binary16.

## The node at a glance

```
             DRAM (external)
                 |  one 64-byte chunk read at a time
        +-----------------------+
        |    node_controller    |--- result stream (x, y, filter, value, bitmap bit)
        |  + wdu (redistribute) |
        +-----------------------+
                 |  H-tree (htree): write / broadcast / bitmap / read-back
   +------+------+------+------+ ... 16 x 16 = 256
   |  pe  |  pe  |  pe  |  pe  |
   +------+------+------+------+
```

The top module is `sparse_node`, with parameters TX = TY = 16 (256 PEs).

- Each PE owns one output tile of up to 14 x 14 positions. A 224 x 224
  output plane therefore fits in one pass of the grid.
- Each PE keeps its input tile, including the halo rows and columns a filter
  needs, in its own 128 KB buffer. The buffer has 4 banks of 32 KB with
  128-byte lines.
- Filters are broadcast to all PEs one at a time.

Layer sequence in `node_controller`:

1. Copy every PE's input tile from DRAM into its buffer.
2. Run the non-zero encoder in every PE over the whole tile.
3. For each filter:
   - broadcast the filter's weights;
   - in the backward pass, send each PE its slice of the bitmap;
   - start all PEs;
   - handle redistribution requests until every PE is idle.

Data are handled in **chunks** of 32 binary16 values (64 bytes, one buffer
half-line). Inputs are stored channel-first: chunk `(x, y, c/32)`. Every
chunk carries an offset map: a 6-bit count plus 32 five-bit positions of its
non-zero entries.

## Inside a PE (`pe`)

| block | file | role |
|---|---|---|
| buffer | `sram_buffer` | 2048 chunks and their offset maps; two read ports and one masked write port; 1-cycle reads |
| address generator | `addr_gen_unit` | bitmap slice, next-computable-position search, receptive-field address table |
| encoder | `nz_encoder` | reads 32 entries, one per cycle, and stores the offsets of the non-zero ones |
| compute lanes | `compute_lanes` | 16 lanes x 2 groups of neuron / offset / synapse registers, with one `fp16_mac` per lane |
| adder tree | `reconfig_adder_tree` | 15 binary16 adders in 4 stages; group size 1, 2, 4, 8 or 16 |
| ReLU | `relu_unit` | forward: max(0, z) and bitmap bit; backward: value passed, bit set |
| sequencer | `pe_controller` | passes, jobs, partial sums, results |

### Lanes and double buffering

A lane holds one chunk of neurons, that chunk's offset map, and the matching
chunk of weights. It visits only the listed offsets, one per cycle, and
multiplies neuron[o] by weight[o] into its accumulator.

- The lanes differ in how many non-zeros they hold. A lane that finishes
  early waits for the rest of its group. These are the **stall cycles**,
  counted in `n_stall`.
- While one group computes, the controller loads the other. Each lane has
  one accumulator per group, so the two groups never share a running sum.
- `in_sparse = 0` visits all 32 entries. Use it for dense inputs, such as
  gradients re-normalised by a batch-norm layer.

### Receptive fields, passes and the reconfigurable tree

The receptive field of one output has `R*S*C/32` chunks. The lanes hold
16 x 2 = 32 chunks, i.e. 1024 input/weight pairs.

**Synapse blocking.** Larger fields are split into **passes**:
- The weights of a pass are loaded once and kept for every output of the tile.
- Non-final passes write partial sums into the buffer.
- The final pass adds the partial sum, applies ReLU and emits the result.

**Pass size.** A pass takes 32 chunks while at least 32 remain. Otherwise it
takes the largest power of two that fits, so 9 chunks become 8 + 1.

**Adder-tree configuration.**
- A pass of n <= 16 chunks sets the tree to groups of n lanes. One group load
  then computes 16/n outputs side by side; for example, 1x1 filters with 32
  channels give 16 outputs per load.
- A pass of 32 chunks spreads one output over both groups and adds the two
  halves.
- The tree's demultiplexers let a group's sum leave at the stage where the
  group ends. The output register holds up to 16 sums.

### Addressing driven by the output bitmap

`addr_gen_unit` returns the first computable position at or after a cursor
and below the end marker.
- Forward pass: every position is computable.
- Backward pass: only positions whose bitmap bit is set.

Positions are flat (`x*14 + y`). For each computed output, chunk k of its
receptive field is at

    neur_base + (x*TW + y)*C/32 + delta[k],
    delta[(i*S + j)*C/32 + c] = (i*TW + j)*C/32 + c,   TW = TV + S - 1

`delta` is filled once per layer, one entry per cycle.

## Work redistribution (`wdu`, `node_controller`)

Every PE reports its progress: current pass, cursor position, end marker, and
whether it is in its last pass. The WDU works as follows:

- **Source:** an idle PE that is not reserved.
- **Target:** among busy PEs in their last pass with at least 30 % of the
  tile left (and at least two positions), the one with the smallest
  `<pass, position>`.
- **Split:** the remaining range `[pos, end)` is halved at
  `mid = pos + ceil(rem/2)`. The target keeps the lower half. Its end marker
  drops to `mid` in the same cycle.

The node controller then does three things:
- copies the target's tile and partial sums into the second area of the
  source's buffer, with their offset maps;
- in the backward pass, sends the source the target's bitmap;
- starts the source on `[mid, end)` at the target's pass, using the target's
  tile origin, so that its results carry the right global coordinates.

Only last-pass targets are chosen. Their partial sums are therefore final and
can be copied while the target keeps working.

## Timing summary

| path | latency |
|---|---|
| H-tree write, root to leaf | 4 cycles (one register per level) |
| H-tree read, request to answer | 2 x 4 + 1 cycles |
| encoder | 32 cycles per chunk; `done` 33 cycles after `start` |
| lane | 1 non-zero per cycle |
| adder tree | result registered 1 cycle after input |
| buffer read | 1 cycle |

## Departures from the published description

- **Pooling is not built.** The pool unit is named in the source but its
  function is never described.
- **DRAM is external.** The node exposes a simple request/response port for
  one chunk at a time.
- **H-tree bandwidth is lower.** The root moves one 64-byte chunk per cycle,
  about 43 GB/s at 667 MHz. The source quotes 512 GB/s of broadcast
  bandwidth.
- **ReLU derivative at zero.** The source writes the ReLU derivative as 1
  for z >= 0. It also states that gradients and features share one sparsity
  pattern. The bitmap here is `z > 0`, which follows the shared-pattern
  statement.
- **Direction of the redistribution copy.** The source text says the idle
  ("source") tile sends input to the busy ("target") tile. Here the busy
  tile's data are copied to the idle one, which is the only direction that
  lets the idle tile do the work.
- **Encoding of outputs.** Outputs leave the node as a stream with their
  bitmap bits. They are not re-encoded in place for the next layer. Each
  layer's input is encoded in the PEs after loading.
- **Layer shapes.** Only stride-1 convolutions are supported, with channel
  counts padded to a multiple of 32 and filters up to 7 x 7.
- **Arithmetic.** Binary16 with round-to-nearest-even. Multiply and add are
  rounded separately. Subnormals flush to zero. There is no NaN.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | covers |
|---|---|
| `tb_fp16_mac` | worked dot-product example plus 4000 random steps against a reference model (`fp16_ref_pkg`) |
| `tb_nz_encoder` | example vector plus 300 random chunks; latency |
| `tb_reconfig_adder_tree` | all group sizes, back to back |
| `tb_relu_unit` | both modes, corner cases and random values |
| `tb_sram_buffer` | full fill and readback; random colliding traffic |
| `tb_addr_gen_unit` | random layer shapes: table latency, addresses, bitmap search |
| `tb_wdu` | source/target choice, threshold, midpoint, end-marker update |
| `tb_htree` | unicast, broadcast, bitmap and read latencies |
| `tb_pe` | one PE end to end against an integer convolution; see below |
| `tb_sparse_node` | whole node end to end; see below |

`tb_pe` cases:
- forward and backward passes;
- 1-, 9-, 36- and 50-chunk receptive fields (multiple passes);
- dense input;
- an end marker lowered mid-run;
- a window of positions.

`tb_sparse_node` (stimulus and DRAM model in `node_env`):
- a forward layer, then a backward layer;
- PE 0's tile is dense and the others are 85 % zero, which forces
  redistribution;
- it fails if redistribution, lane stalls, multi-pass blocking or backward
  output skipping never occur.

Inputs are small integers, so binary16 sums are exact and every result is
compared bit for bit.

The largest node simulated is 2 x 2 PEs, with 4 x 4 tiles and two filters
per layer. Compiling the default 16 x 16 node for simulation produces a
model too large to build in reasonable time. It does pass lint and
elaboration.

To run a testbench with Verilator:

    verilator --binary --timing --assert -y rtl -y tb rtl/sparse_pkg.sv \
      tb/fp16_ref_pkg.sv tb/tb_sparse_node.sv --top-module tb_sparse_node
    ./obj_dir/Vtb_sparse_node

Reduce `TX`/`TY` on `sparse_node` to simulate smaller grids. The tile limit
(14 x 14) and the buffer size (`ADDR_W`) are in `sparse_pkg`.
