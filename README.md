# A blocked FP32 systolic array for dense neural-network layers

This is synthesizable SystemVerilog for a two-dimensional systolic array. It computes one dense
(fully connected) layer of a neural network at a time:

    C = f(A x B + bias)

- **A** is a batch of input vectors, one row per sample.
- **B** is the layer's weight matrix.
- **bias** is added per output column.
- **f** is ReLU or the identity.

All arithmetic is IEEE-754 single precision. A host runs a whole multilayer perceptron by issuing
one job per layer.

The architecture follows the OpenCL systolic array described in *Evolutionary Cell Aided Design for
Neural Network Architectures*. There it is the hardware search space of an evolutionary co-design
framework targeting an Arria 10 FPGA. This RTL writes out that array's datapath and adds the
control that its OpenCL kernels left implicit. Where the RTL follows the source design and where it
makes its own choices is listed at the end.

The array is described by five parameters, the same five the source design uses:

| parameter    | meaning                                                              | default |
|--------------|----------------------------------------------------------------------|---------|
| `ROWS`       | rows of processing elements (PEs)                                    | 4       |
| `COLS`       | columns of PEs                                                       | 4       |
| `VEC`        | width of each PE's dot product, in FP32 words                        | 8       |
| `INTERLEAVE` | `I`: each PE works on an I x I tile of outputs at once               | 8       |
| `SCALE`      | `S`: vector steps per block along the common dimension               | 8       |

The defaults are the (4, 4, 8, 8, 8) configuration on which the source design was measured. At
those defaults the grid does `ROWS*COLS*VEC` = 128 multiply-adds per clock.

## Blocking: how the matrices are cut up

Everything in the design follows from how A, B and C are cut into blocks. The unit sizes are:

- **Output block:** `ROWS*I` rows x `COLS*I` columns of C. That is 32 x 32 at the defaults.
- **Common block:** `VEC*S` words along the common dimension. That is 64 at the defaults.

A job computes `m_blocks x n_blocks` output blocks. Each output block is the sum of `k_blocks`
block products.

Memory layout. The host prepares the operands in this layout. All addresses are 32-bit word
addresses.

- **A** is stored as `m_blocks x k_blocks` blocks of `ROWS*I x VEC*S` words.
  - Block (m, k) starts at `a_base + (m*k_blocks + k) * ROWS*I*VEC*S`.
  - Inside a block, words are row-major.
- **B** is stored transposed, as `n_blocks x k_blocks` blocks of `COLS*I x VEC*S` words.
  - Block (n, k) starts at `b_base + (n*k_blocks + k) * COLS*I*VEC*S`.
  - Each block row is one output column's slice of the common dimension.
  - This makes every memory read a run of `VEC` consecutive words for both operands.
- **bias** is one word per output column, at `bias_base + column`.
- **C** is written as `m_blocks x n_blocks` blocks of `ROWS*I x COLS*I` words.
  - Block b = m*n_blocks + n starts at `c_base + b * ROWS*I*COLS*I`.
  - Inside a block, words are row-major.

Every dimension is padded with zeros to a whole number of blocks. Zero rows and columns in the
padding produce exact zeros, so padding never changes the real results. To feed one layer's output
into the next layer, the host re-lays the C blocks out as A blocks. The full-size testbench does
exactly this between layers.

## Data flow

```
            loader B --> B MMod 0 --> B MMod 1 --> ... B MMod COLS-1
                             |            |                 |
 loader A --> A MMod 0 --> PE(0,0) ---> PE(0,1) ---> ... PE(0,COLS-1)
          |                  |            |                 |
          +-> A MMod 1 --> PE(1,0) ---> PE(1,1) ---> ...
          |                  :            :
          ...
  results drain upwards:   OMod 0 <---- OMod 1 <---- ... OMod COLS-1
                             |
                        global drain --> memory
```

### Loaders (`sa_loader`)

There is one loader for A and one for B. A loader walks the job in output-block order:

1. for each m;
2. for each n;
3. for each k;
4. read that block pair's block, one `VEC`-word vector per memory request.

Requests are pipelined, with up to `OUTSTANDING` (16) in flight.

Each vector is tagged:

- `first` on the first common block of an output block;
- `last` on the last common block of an output block.

After the job's last block, each loader sends one *flush block* of zero vectors without reading
memory. The flush pass clears every accumulator and pushes the last results out of the grid.

### Memory modules (`sa_mmod`)

There is one MMod per grid row for A and one per grid column for B, chained.

- **Loading.** Each MMod keeps its own share of a block: `I` rows of A, or `I` columns of B. It
  passes the rest down the chain.
- **Double buffering.** Each MMod has two buffers. One fills while the other is read out, so loading
  the next block overlaps computing with the current one.
- **Read-out order.** A buffer is read in the order step s, row i, column j, one vector per cycle.
  For each vector step, every pairing of the MMod's `I` A rows with the `I` B columns goes through
  the grid.
- **Skew.** MMod `r` delays its output by `r` cycles. The data then meets in the grid in systolic
  order.

### Processing elements (`sa_pe`)

A PE receives an A vector from the left and a B vector from above. It passes both on, registered, to
its right and lower neighbours.

The PE pipeline has three stages:

1. `VEC` FP32 multipliers;
2. a pairwise adder tree, `log2(VEC)` levels, reducing the products to one partial sum;
3. an FP32 adder that accumulates that partial sum onto the value at the head of an `I*I`-entry
   circular shift register.

The shift register is the point of interleaving. Consecutive vectors belong to `I*I` *different*
output elements, so one accumulator never has to wait for its own previous sum to come out of the
adder. That is how the source design keeps a deeply pipelined FP adder busy every cycle.

A counter of completed vector steps tells the PE when an element has received all
`k_blocks*S` steps. The accumulator output then goes to the PE's drain cache instead of back into
the shift register. At the same time the shift register slot is cleared for the next output block.

### Results leaving the grid

- **Drain caches.** Each PE has a drain cache of `I*I` words. It first sends its own results, then
  passes on the results of the PEs below it.
- **OMods (`sa_omod`).** Each column's top PE feeds an OMod. The OMods form a chain that ends at the
  global drain. Each OMod sends its own column, then what arrives along the chain.
- **Global drain (`sa_global_drain`).** Results therefore reach the global drain in drain order:
  1. column by column;
  2. inside a column, PE row by PE row;
  3. inside a PE, its I x I tile in row-major order.

The global drain puts each word at its row-major place in an input cache that holds one output
block. During that time it fetches the block's `COLS*I` bias words into a bias cache. With bias
disabled, it preloads the bias cache with zeros and never reads memory.

When the block is complete, the drain reads it out row by row through the bias adder and the
activation multiplexer (ReLU or bypass). It writes one word per cycle, contiguously, to C.

## Passes, the sequencer and the drain stall

One *pass* plays one block pair (A block, B block) through the grid:

- it lasts `S*I*I` cycles, 512 at the defaults;
- during it, each PE sees `S` vector steps for each of its `I*I` outputs.

A small sequencer in the top module starts a pass by swapping all MMods' buffers at once. It does so
when two conditions hold:

- every MMod holds a complete block;
- no MMod is still playing the previous pass.

Swaps come at most one per `S*I*I + 1` cycles. The extra cycle is the sequencer's turnaround.

A pass that carries the `last` tag completes output elements and fills the drain caches. Before such
a pass may start, the whole grid must be idle and every drain cache empty. Otherwise a fresh result
could meet an unsent one. Waiting for that is the *drain stall*, and the top counts it in
`stall_cycles`.

With several common blocks per output block (k_blocks ≥ 3 at the defaults), draining overlaps the
next output block's first passes, and the stall is short. With few common blocks, the layer runs at
the global drain's pace instead. The global drain is single-buffered, so it takes about `2 *
ROWS*I*COLS*I` cycles per output block.

A job ends (`done`) when all of these hold:

- the flush pass has left the grid;
- both loaders are finished;
- the global drain has written the last block.

`pass_count` then equals `m_blocks*n_blocks*k_blocks + 1`; the extra pass is the flush.

## Arithmetic

- **Multipliers and adders** (`fp32_mul`, `fp32_add`) are combinational IEEE-754 binary32 units:
  - round to nearest, ties to even;
  - subnormal inputs and results flushed to zero;
  - overflow to infinity;
  - NaN propagated.
  The PE registers around them.
- **Summation order** is fixed by the hardware:
  1. the adder tree sums each vector of `VEC` products pairwise;
  2. those partial sums are accumulated in order of the common dimension;
  3. the bias is added last;
  4. ReLU is applied to the sum.

  The testbenches' reference models sum in the same order, so results are compared bit for bit.
  Results will differ in the last bits from a plain sequential dot product.

## Using the top module

`ecad_systolic_array` has plain ports:

- **Job inputs:**
  - `start`;
  - `m_blocks`, `n_blocks`, `k_blocks`, each 16 bits;
  - `a_base`, `b_base`, `bias_base`, `c_base`;
  - `bias_en`, `act_en`.
- **Memory ports:** four, all valid/ready.
  - Two vector read ports, `a_rd_*` and `b_rd_*`. Each request returns `VEC` consecutive words.
  - A word read port for bias, `bias_rd_*`.
  - A word write port, `wr_*`.
  - Read responses return in request order, one per cycle, and cannot be refused.
- **Status:** `done`, `running`, `pass_count`, `stall_cycles`.

To run a layer:

1. Lay out A, B and bias as above.
2. Apply the job inputs with `start` high for one cycle.
3. Wait for `done`.

The four memory ports are independent. In a real system they would be arbitrated onto one DRAM
controller, and the testbenches' memory model serves them all from one array.

Reset is synchronous and active low.

## Performance

At the defaults, the design sustains one 8-wide vector pair into each PE per cycle while passes run
back to back. That is 128 multiply-adds per cycle, 64 GFLOP/s at 250 MHz.

Measured in simulation on the MNIST network 784-196-190-150-10 at batch 32. Memory latency is 6
cycles, with no memory stalls.

| layer         | passes | cycles |
|---------------|--------|--------|
| 784 -> 196    | 91     | 49,002 |
| 196 -> 190    | 24     | 14,622 |
| 190 -> 150    | 15     | 12,000 |
| 150 -> 10     | 3      | 3,804  |
| **total**     |        | **79,428** |

- The total is 0.32 ms at 250 MHz. The source design's performance model gives 0.38 ms for this
  network and configuration at batch sizes up to 32. Its measurement on the FPGA gave 0.68 ms.
- The third layer is bound by the global drain: it has only three common blocks per output block.
- A 784-1018-10 network at batch 32 takes 226,425 cycles.
- Batches up to 32 cost the same time, because the batch is padded to a 32-row block.

## Where this design departs from the source

**Follows the source design:**

- the five parameters and their defaults;
- the block sizes, and storing B transposed;
- the loader → chained double-buffered MMods → PE grid → OMod chain → global drain structure;
- the PE's multipliers, adder tree and interleaved shift-register accumulator, with the "start from
  zero on a new block" flag;
- results draining along the columns;
- flush blocks of zeros at the end of a run;
- bias caching, with zeros when bias is off;
- an activation multiplexer that can bypass `f`;
- contiguous result writes;
- FP32 arithmetic.

**This design's own choices:**

- **Central sequencer.** The source kernels are decoupled by OpenCL channels. Here a central
  sequencer starts each pass and enforces the drain stall explicitly.
- **Activation.** `f` is ReLU; the source does not fix the hardware activation.
- **Global drain buffering.** The global drain holds one output block. There is no double buffer, so
  layers with very few common blocks are drain-bound.
- **Memory ports and job interface.**
  - Separate memory ports for A, B, bias and results.
  - 32-bit word addresses.
  - In-order responses.
  - A start/done job interface in place of kernel arguments.
- **Rounding and special values.** Round-to-nearest-even with subnormals flushed to zero; the
  source says only "single precision".
- **Zeroing on route-out.** The shift register slot is zeroed when a result leaves it. The
  start-from-zero flag is therefore redundant here, but it is kept as in the source.
- **Clocking and reset.** Synchronous active-low reset and one clock.

**Not covered.** The framework's software side, the DRAM and its controller are not part of this
RTL. That covers the evolutionary search, network training, the host program and the hardware
performance model. The other array configurations the search found are reachable through the
parameters, but only the ones listed below were simulated:

- (4,8,8,16,18);
- (2,8,16,16,2);
- (2,16,32,32,2);
- (2,8,32,16,2).

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops with a watchdog if it hangs.

| testbench                | what it checks |
|--------------------------|----------------|
| `tb_fp32_mul`, `tb_fp32_add` | 22,000 random and special-case operands against a reference built on double precision with explicit rounding |
| `tb_sa_fifo`             | random push/pop against a queue model |
| `tb_sa_loader`           | addresses, data order, tags and flush block, under memory back-pressure |
| `tb_sa_mmod`             | chained share/forward, double buffering, read order and skew latency |
| `tb_sa_pe`               | dot products, interleaving, route-out timing and the drain merge |
| `tb_sa_omod`             | chain order under random handshakes, one word per cycle |
| `tb_sa_global_drain`     | re-ordering, bias on/off, ReLU on/off, write addresses |
| `tb_ecad_systolic_array` | end to end at (2,2,4,4,2): three jobs, every result word; counts back-to-back passes, drain stalls, flush passes, bias and activation modes, and read and write back-pressure, failing if any never occurs |
| `tb_mlp_workload`        | the two MNIST networks above at the default parameters, bit-exact per layer, with per-layer cycle bounds |

The shared helpers are:

- `tb/fp_ref_pkg.sv`, the reference arithmetic;
- `tb/ddr_model.sv`, a behavioural memory with fixed latency and random back-pressure.

To run a testbench with Verilator 5 from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --top-module tb_mlp_workload \
        -y rtl -y tb +libext+.sv rtl/sa_pkg.sv tb/fp_ref_pkg.sv tb/tb_mlp_workload.sv
    ./obj_dir/Vtb_mlp_workload

Replace the top module and the last file name for any other testbench. The full-size workload test
takes about half a minute to build and a few seconds to run.

## Files

| file | contents |
|------|----------|
| `rtl/sa_pkg.sv`            | shared types: FP32 word, block tag, ReLU |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | FP32 multiplier and adder |
| `rtl/sa_fifo.sv`           | first-word-fall-through FIFO, used for caches and channels |
| `rtl/sa_loader.sv`         | block loader with flush sequence |
| `rtl/sa_mmod.sv`           | double-buffered memory module |
| `rtl/sa_pe.sv`             | processing element |
| `rtl/sa_omod.sv`           | output module |
| `rtl/sa_global_drain.sv`   | re-order, bias, activation, write-back |
| `rtl/ecad_systolic_array.sv` | top level and pass sequencer |
