# A tunable FP32 systolic grid for multilayer-perceptron layers

An MLP layer is a matrix product followed by a bias and an activation:
`C = act(A x W^T + b)`. `A` holds one input vector per row and `M` rows in a
batch. `W` holds one weight row per neuron, `N` neurons by `K` inputs. This
RTL runs one such layer on a two-dimensional systolic grid of floating-point
processing elements (PEs). The weights and activations stream in from
external DRAM. Results go back to DRAM after the bias add and the
activation.

The design is meant to be co-designed with the network. Four numbers shape
the hardware, and a search tool can tune them for one MLP:

| parameter | meaning | default |
|---|---|---|
| `ROWS`, `COLS` | size of the PE grid | 4, 4 |
| `VEC` | vector width of a PE: FP32 multipliers per PE | 8 |
| `IL_A`, `IL_B` | interleaving: how many A rows / weight rows each grid row / column holds per bank of its double buffer | 4, 4 |

These four are the grid variables of the published architecture. The default
values are not published. They were chosen here as a mid-sized example:
128 multipliers, a small part of the 1518 FP32 DSP blocks of an Arria 10 1150.
Every parameter can be changed.

Peak rate is `2*ROWS*COLS*VEC` flops per clock. At the defaults that is
256 flops per clock, or 64 GFLOP/s at 250 MHz.

Each PE has `VEC` multipliers and `VEC` adders: `VEC-1` adders in its
reduction tree and one for the accumulator. That is one multiply-add pair
per lane, so on an FPGA with hard floating-point DSP blocks the grid needs
`ROWS*COLS*VEC` DSP blocks.

## How a layer is cut up

The output `C` is computed in tiles of `TM = ROWS*IL_A` rows (batch) by
`TN = COLS*IL_B` columns (neurons). A tile is built from `K/VEC` *k-steps*.
A k-step is one `VEC`-wide slice of the input dimension.

Inside a tile, PE `(r, c)` owns `IL_A x IL_B` output elements. It holds one
accumulator for each:

```
row    m = m0 + ia*ROWS + r      ia in 0..IL_A-1
neuron n = n0 + ib*COLS + c      ib in 0..IL_B-1
```

So the grid is *output-stationary*: results stay in the PEs until the tile
is finished. In each k-step:

* the A feeder of grid row `r` holds the `IL_A` A-row slices `m = m0+ia*ROWS+r`;
* the B feeder of grid column `c` holds the `IL_B` weight-row slices `n = n0+ib*COLS+c`;
* the controller replays them for `IL_A*IL_B` cycles, one `(ia, ib)` pair per
  cycle with `ib` changing fastest. In every one of those cycles, every PE
  does a `VEC`-wide dot product and adds it into accumulator `[ia][ib]`.

Each vector fetched from DRAM is therefore used `IL_B` times (A) or `IL_A`
times (B). This reuse is the purpose of the interleaving.

### Bandwidth

Per k-step the loader reads `TM + TN` vectors, and the grid needs
`IL_A*IL_B` cycles to use them. With the one-vector-per-cycle read port
used here, the grid can only be fully busy when

```
ROWS*IL_A + COLS*IL_B  <=  IL_A*IL_B
```

The defaults give 32 > 16, so they are memory bound. The grid is busy at
most half the time, plus drain time. This is intentional: memory-bound
designs were the usual case for the single-bank DDR4 system this
architecture was explored on. Larger interleaving, or a wider read port,
moves the design toward compute bound. The search trades the two against
each other.

### Benchmark-shaped networks

`tb/mlp_workload_tb.sv` runs one batch of 16 inputs through a two-layer
network for each of six benchmark datasets, at the default size. The input
width and the class count are the datasets' public sizes. The hidden layer
is set to 32 ReLU neurons, because the evolved hidden sizes differ from
network to network.

The memory in this test accepts one vector per cycle with a latency of 8
cycles. Measured cycles for the whole batch:

| network | inputs (padded) | cycles | outputs/s at 250 MHz |
|---|---|---|---|
| MNIST, Fashion-MNIST | 784 | 6882 | 5.8e5 |
| HAR | 561 (568) | 5100 | 7.8e5 |
| Bioresponse | 1776 | 15066 | 2.7e5 |
| Phishing | 30 (32) | 678 | 5.9e6 |
| Credit-g | 20 (24) | 612 | 6.5e6 |

Almost all of the time goes into streaming the first layer's weights, since
the batch is only one tile high. Larger batches reuse each weight vector for
more rows and raise the throughput, up to the bandwidth limit above.

### Memory layout and padding

All addresses are 32-bit *word* addresses.

| matrix | layout | address of element |
|---|---|---|
| A (`M x K`) | row-major | `a_base + m*K + k` |
| W (`N x K`) | one row per neuron, row-major | `w_base + n*K + k` |
| bias (`N`) | contiguous | `bias_base + n` |
| C (`M x N`) | row-major | `c_base + m*N + n` |

The host pads the matrices:

* `M` to a multiple of `TM`;
* `N` to a multiple of `TN`;
* `K` to a multiple of `VEC`. Padded inputs and padded weights must be zero.

With this layout, the `C` of one layer is the `A` of the next. Set
`k_vecs(next) = N/VEC`, which needs `TN` to be a multiple of `VEC` (true at
the defaults). Padded neurons come out as `act(0 + 0) = 0` when their bias
is zero, so they add nothing in the next layer. Padding wastes work on small
layers. For example, a 2-class output layer uses 2 of 16 neuron lanes.

## Timing of one k-step through the grid

```
cycle       t         t+1          t+1+r        t+1+r+c        t+2+r+c     t+3+r+c
controller  issue(ia,ib,bank)
feeder A              read bank    row r out (skewed r)
feeder B              read bank    col c out (skewed c)
PE(r,c)                                          dot product    register    accumulate
```

The skew is created inside the feeders. Lane `l` has an `l`-stage delay
line. A and the tag that travels with it then move one PE to the right per
cycle, and B moves one PE down per cycle. As a result, PE `(r, c)` receives
matching A and B vectors exactly `r + c` cycles after row 0 / column 0.

The tag carries:

* `valid`;
* `first`, set on the first k-step of a tile, which makes the PE overwrite
  the accumulator instead of adding to it;
* `ia`, `ib`.

After the last k-step of a tile, the controller waits `FLUSH = ROWS+COLS+4`
cycles, long enough for the last vector to reach PE `(ROWS-1, COLS-1)`.
It then starts the drain.

The drain reads the tile out one PE row and one `(ia, ib)` at a time,
through a multiplexer. That gives `COLS` contiguous results per beat, so
`TM*IL_B` beats per tile. For each beat it adds the bias of each neuron,
applies the activation and writes the beat to DRAM. The first k-step of
the next tile waits until the drain has finished. Loading does not wait:
the loader keeps filling the free feeder bank and the other bias bank.

## Double buffering between loader and controller

* **Feeder banks.** Both feeders have two banks. The loader and the
  controller walk the same schedule (tile `m` outer, tile `n` inner, then
  k-steps), and k-step `s` always uses bank `s mod 2`.
  * The loader claims a bank when it issues the bank's first read.
  * It raises `bank_full` when the last response of that k-step has been
    written.
  * The controller replays only a full bank. It pulses `bank_release` when
    the replay is done.
* **Bias banks.** There are also two bias banks, alternating per tile. The
  loader reads a tile's bias ahead of that tile's first k-step. The drain
  releases the bank when the tile has been written.
* **Outstanding reads.** The loader records the destination of each read
  request in a FIFO (`FIFO_DEPTH = 16`). Responses come back in order. The
  FIFO depth also limits how many reads can be outstanding.

## Blocks

| file | block |
|---|---|
| `rtl/mlp_pkg.sv` | shared types: `fp32_t`, `layer_cfg_t` (layer command), `pe_tag_t`, `act_e` |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | FP32 multiplier and adder, combinational; together they play the part of the hard floating-point DSP slice |
| `rtl/pe.sv` | PE: `VEC` multipliers, pairwise adder tree, pipeline register, `IL_A x IL_B` accumulators, systolic forwarding |
| `rtl/pe_grid.sv` | `ROWS x COLS` PEs wired as a systolic array, plus the drain read multiplexer |
| `rtl/feeder.sv` | double-buffered vector cache for one grid edge, with per-lane skew; used once for A (rows) and once for B (columns) |
| `rtl/loader.sv` | DRAM read sequencer, destination FIFO, bank bookkeeping |
| `rtl/gemm_ctrl.sv` | compute sequencer: replay, bank release, flush, drain start, `done` |
| `rtl/drain.sv` | tile read-out, bias banks, bias add and activation (through `bias_act`), DRAM write port |
| `rtl/bias_act.sv` | `LANES` bias adders and the activation (identity or ReLU) |
| `rtl/mlp_accel_top.sv` | the accelerator: one layer per command |

## Interface of `mlp_accel_top`

### Layer command

Hold `cfg` valid and pulse `start` for one cycle. `busy` stays high until the
last result has been written. `done` pulses once at that point.

`cfg` is a `layer_cfg_t` with these fields:

* sizes in tiles and vectors: `m_tiles`, `n_tiles`, `k_vecs`;
* four base addresses: `a_base`, `w_base`, `bias_base`, `c_base`;
* `bias_en`;
* `act`: `ACT_NONE` or `ACT_RELU`.

### DRAM read port

* Requests use `rd_req_valid`, `rd_req_ready` and `rd_req_addr`. Each
  request asks for `VEC` consecutive words.
* Responses use `rd_resp_valid` and `rd_resp_data`. They come back in
  request order, at most one per cycle, and cannot be back-pressured.

### DRAM write port

The write port uses `wr_valid`, `wr_ready`, `wr_addr` and `wr_data`. Each
beat carries `COLS` consecutive words. Address and data stay stable while
the port is stalled.

### Status

`stall_mem` is high in cycles when the grid could work but is waiting for
data. It can drive a performance counter, and it shows how far a
configuration is from its roofline.

### Running a multi-layer MLP

The host runs the layers one after another. Each layer's `c_base` becomes
the next layer's `a_base`.

## Arithmetic

All data is IEEE-754 single precision.

* **Multiply and add.** Both round to nearest, ties to even.
* **Subnormals.** Subnormal inputs are read as zero. Subnormal results
  become signed zero.
* **NaN.** Every NaN result is `0x7FC00000`.

Hard FP DSP blocks also flush subnormals. Because of that flush, results can
differ from a CPU's in the last bits when values are tiny.

**Summation order.** The dot product inside a PE is summed as a balanced
pairwise tree:

```
((p0+p1)+(p2+p3)) + ((p4+p5)+(p6+p7))
```

The k-steps are then added into the accumulator in order. This fixed order
makes the results repeatable. It is not the order a sequential CPU loop
uses.

The bias add uses the same adder. With `bias_en` low, the adder adds `+0`,
which turns a `-0` result into `+0`. ReLU maps every value whose sign bit is
set, including `-0`, to `+0`.

The arithmetic is purely combinational. One PE therefore has a long path,
through a multiplier, `log2(VEC)` adders and a register. A real FPGA
implementation would map these onto pipelined DSP blocks and add pipeline
stages. This RTL keeps the two-stage PE for clarity, and the controller's
`FLUSH` constant would have to grow to match any added stages.

## Relation to the published architecture

**Taken from the published architecture:**

* a 2-D systolic grid of FP32 PEs for the GEMMs of an MLP;
* the grid variables: rows, columns, per-dimension double-buffer depth
  ("interleaving") and PE vector width;
* bias vector addition and activation support on the grid output;
* a layer computed as a series of blocked matrix multiplications, with all
  operands and results in external DRAM;
* DSP use equal to rows x columns x vector width.

**Choices made here and not published:**

* default sizes;
* output-stationary dataflow and the tile and k-step loop order;
* the memory layout and the padding rule;
* the read and write port protocols;
* the read-out multiplexer, where a fully systolic drain would shift results
  out;
* the two-stage PE pipeline;
* the subnormal and rounding policy.

**Activations.** Only identity and ReLU are provided. Which functions the
original searched is not published.

**Not modelled:**

* the DDR4 memory and its controller;
* multi-bank memory. Two or four banks would mean two or four read ports, or
  a wider one. Here there is one read port of one vector per cycle.
* the OpenCL host runtime;
* the software side of the co-design flow: the evolutionary search and the
  performance model that scores configurations.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with the line
`TB_RESULT checks=N failures=M`.

**Shared reference.** `tb/fp_ref_pkg.sv` is an FP32 reference used by all
testbenches. It computes in double precision and then rounds once to
single. This is exact for `+` and `*`, because 53 >= 2*24+2 bits. It
applies the same subnormal policy as the RTL.

**Per-block testbenches:**

* `fp32_mul_tb`, `fp32_add_tb`: special cases and 40,000 random operands
  each, compared bit for bit with the reference.
* `pe_tb`: accumulator latency of two edges, systolic forwarding, and a
  random stream of tags and `first` overwrites.
* `pe_grid_tb`: two tiles on a 2x3 grid with skewed inputs, checked against
  an integer matrix product.
* `feeder_tb`: skew timing per lane, and writing one bank while the other
  is replayed.
* `loader_tb`: every vector and bias placed in the right bank and slot;
  outstanding-read limit; request counts.
* `gemm_ctrl_tb`: replay order and rate (`IL_A*IL_B` cycles per k-step);
  bank release; flush distance; drain and next-tile ordering.
* `drain_tb`: write addresses and data under back-pressure; bias banks;
  both activations.
* `mlp_accel_top_tb`: the whole accelerator at its default size. It runs a
  two-layer MLP (24 -> 32 ReLU -> 16) through a DRAM model with random
  back-pressure and latency, then runs again with an ideal memory. The
  testbench also counts each mechanism and fails if one never happens:
  * compute stalled on memory;
  * loading overlapped with compute;
  * loader waiting for a free bank;
  * read and write back-pressure;
  * several tiles and k-steps;
  * bias on and off;
  * ReLU clamping.

**Exact integer checks.** The system-level tests use small integer values.
Every FP32 operation on them is then exact, so the expected results are
plain integer arithmetic.

**Running a testbench** with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/mlp_pkg.sv tb/fp_ref_pkg.sv tb/mlp_accel_top_tb.sv --top-module mlp_accel_top_tb
./obj_dir/Vmlp_accel_top_tb
```

Replace the last file and the top module name to run another testbench. The
block testbenches override the block parameters with small values so that
every corner is reached quickly. The top-level testbench runs the defaults.
