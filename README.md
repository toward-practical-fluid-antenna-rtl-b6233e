# An instruction-driven GNN accelerator for beamforming with fluid antennas

A base station whose antennas are *fluid antennas* can move each radiating
element to one of several discrete ports. Choosing ports and beamformers
jointly is a mixed-integer problem. The approach implemented here splits it:
a random search proposes a few candidate port selections, and for each one a
small graph neural network (GNN) computes the beamforming matrix of the cell
in a single forward pass. The best candidate wins.

Every candidate means one more GNN inference, and all of them run the same
network with the same weights. This RTL is a hardware engine for that
inference. It is an overlay processor driven by a compiled instruction
stream, with 8-bit fixed-point arithmetic and a 64-bit off-chip memory port.
The network has about 3.2 MB of weights but does only a few multiply-adds per
weight byte, so the time goes into streaming the weights from memory. The
design's main idea follows from that: several port selections are stacked as
extra rows of the same matrices. Each weight byte fetched from memory then
serves up to four inferences, and four inferences cost little more than one.
At the default size, one port selection takes 417,539 clock cycles in
simulation and four take 479,305 (4.2 ms and 4.8 ms at 100 MHz).

## The network it runs

One GNN serves one cell with K users (UEs). The base station has N fluid
antennas. Row k of the input matrix holds the real and imaginary channel
coefficients of UE k, so the input is K x 2N. Every layer below is a fully
connected (FC) layer applied to every row, followed by ReLU except where
marked.

| stage            | FC layers (in x out)        | extra operation                               |
|------------------|-----------------------------|-----------------------------------------------|
| input MLP        | 2N x 1024, 1024 x 512       |                                               |
| GNN layer (x2)   | MLP1: 512 x 512, 512 x 512  | max over the *other* UEs' rows, per column     |
|                  | MLP2: 1024 x 512, 512 x 512 | MLP2 input is [own row, max of the others]      |
| output           | 512 x 2N (no ReLU)          | power normalization of the whole K x 2N matrix |

The result is the K x 2N beamforming matrix (real and imaginary parts per
antenna). The reference sizes are K = 4 and N = 4, so the first layer is
8 x 1024.

T port selections are processed together as one matrix of M = K*T rows. The
FC layers do not care which rows belong to which selection. Only max-pooling
and normalization work within groups of K rows, and their instructions carry
the group size.

## Block structure

```
                 host register bus                       off-chip memory
                        |                      (instruction read / data read / data write)
                   host_ctrl  (start, status, counters)         |      |         ^
                        |                                       |      |         |
                   inst_ctrl  fetch -> prefetch queue -> in-order dispatch       |
                 /      |          \              \                              |
          mem_read  computing_cores  post_proc   mem_write ----------------------+
              |       ^   |    ^       |   ^          ^
              v       |   v    |       v   |          |
        double_buffer |  accumulator   inter_buffer --+
        (2 banks:     |  buffer  ------^    |
         weight tile, |                     |
         input rows,  +---------------------+   (activations of the next layer)
         biases)
```

* **inst_ctrl**: the internal control unit. It fetches 128-bit instructions
  in bursts of four, keeps up to eight in a prefetch queue, and dispatches
  them in order to one of four units. Each instruction carries a wait mask
  naming the units that must be idle before it may start. This lets the
  compiler express every data dependency, while independent work on
  different units still overlaps. An `END` instruction waits for all units,
  raises `done` and discards anything fetched after it.
* **host_ctrl**: the external control unit. It holds registers for the
  program address, start, status, cycle count, dispatch-stall count and
  instruction count, plus a level interrupt when a run is done.
* **mem_read**: turns a memory instruction into one burst request on the
  data-read port. It writes the incoming 64-bit beats into the chosen bank
  and region of the double buffer. The three kinds of load are a weight tile
  (depth x 32 bytes), biases, and input rows.
* **double_buffer**: two identical banks. Each bank holds a weight tile of up
  to 1024 x 32 bytes, an input region and 1024 bias bytes. Every instruction
  names its bank, and the compiler alternates the banks. While the cores
  multiply with bank *b*, the next tile streams into bank *1-b*. An assertion
  checks that a weight bank is never overwritten while it is being read.
* **computing_cores**: eight 4x4 output-stationary systolic arrays
  (`systolic_array`, built from `pe`). They compute one 4-row x 32-column
  output block per pass. A matrix instruction runs M/4 passes over `depth`
  reduction steps. It leaves 32-bit sums in an accumulator buffer, which it
  either overwrites or adds to (`acc`).
* **post_proc**: reads the accumulator buffer or the intermediate buffer and
  writes 8-bit results to the intermediate buffer. Its operations are bias
  add with optional ReLU and requantization (MADD), max-pooling that excludes
  the row itself, concatenation by column copy, and normalization.
* **inter_buffer**: holds the 16-row x 4096-column activation store. It has
  one write port and three read ports (cores, post processing, write-back).
  Activations never leave the chip between layers.
* **mem_write**: streams a column range of the intermediate buffer to memory.
  In practice that is only the final beamforming matrix.

Off-chip memory itself and the host processor with its compiler are outside
the RTL. The testbenches contain a behavioural memory (`tb/ddr_model.sv`) and
a small compiler (`tb/gnn_run.sv`).

## Data layout

**Activation words.** On chip, an activation word is 32 bits. It holds column
*c* of four consecutive rows (one *row group*), row 0 in the low byte. An
activation matrix with M rows and C columns that starts at column `col`
occupies words `rowgroup*COLS + col ... + C-1`, where COLS is 4096 in the
intermediate buffer and 64 in the input region. A 64-bit memory beat holds two
such words: column 2j in the low half and column 2j+1 in the high half.

**Weight tiles.** A layer with `din` inputs and `dout` outputs is stored as
ceil(dout/32) tiles. Each tile is `din` rows of 32 bytes, column-major across
tiles and zero-padded past `dout`. Four beats fill one tile row, so loading a
1024-deep tile takes 4096 beats. The cores read one full tile row (32 weights)
per cycle. The biases of a layer follow its tiles, one byte per output column.

**Intermediate buffer plan** used by the reference program (columns):

| columns        | contents                                           |
|----------------|----------------------------------------------------|
| 0 .. 1023      | output of FC 1 (1024 wide), later scratch of 512    |
| 512 .. 1023    | MLP1 output x2 (input of max-pooling)               |
| 1024 .. 1535   | layer input/output x1                               |
| 1536 .. 2559   | [x1, max(x2 of the other rows)], 1024 wide          |
| 2560 ..        | output FC result, then the normalized result        |

## Instruction word

128 bits, fetched as two beats with the low beat first. The fields are listed
from the most significant bit down.

| bits     | field     | use                                                               |
|----------|-----------|-------------------------------------------------------------------|
| 127:126  | typ       | 0 memory, 1 matrix, 2 post processing, 3 end                       |
| 125:122  | sub       | memory: 0 weight tile, 1 input rows, 2 biases, 3 write-back;<br>post: 0 MADD, 1 MAXP, 2 CONCAT, 3 NORM |
| 121:118  | wait_mask | bit 0 mem_read, 1 cores, 2 post_proc, 3 mem_write must be idle     |
| 117      | bank      | double-buffer bank                                                 |
| 116      | relu      | MADD applies ReLU                                                  |
| 115      | acc       | matrix op adds to the accumulator                                  |
| 114      | src_sel   | matrix op reads the input region (0) or the intermediate buffer (1) |
| 113:82   | ddr_addr  | byte address in off-chip memory                                    |
| 81:77    | rows      | M, number of rows                                                  |
| 76:66    | depth     | reduction length / weight-tile rows                                |
| 65:55    | cols      | number of columns                                                  |
| 54:43    | src_col   | first source column                                                |
| 42:31    | dst_col   | first destination column                                           |
| 30:27    | shift     | MADD requantization shift                                          |
| 26:22    | group     | rows per port selection (K) for MAXP and NORM                      |
| 21:6     | imm       | matrix: first weight row; input load: first row group;<br>MADD: bias offset; NORM: target norm |

## How a program overlaps loading and computing

The compiler walks all 32-column output tiles of all layers in order. Write
n for the global tile index, L(n) for its weight and bias loads, MM(n) for its
matrix instruction and P(n) for its MADD. It emits:

```
L(0)
for each tile n:
    MM(n)      bank n%2, waits for: mem_read idle, post_proc idle
    L(n+1)     bank (n+1)%2, no wait: streams while MM(n) runs
    P(n)       bank n%2, waits for: cores idle
    [after the last tile of a layer: MAXP and CONCAT, or NORM]
write-back, END
```

The wait on post_proc keeps MM(n) from overwriting accumulators that P(n-1)
still reads. It also makes a layer wait for the previous layer's results. The
wait on mem_read makes MM(n) wait for its own tile. Because L(n+1) is issued
before P(n), the weight stream is almost never idle. For one port selection
the loop is memory bound: a 1024-deep tile takes 4096 beats to load but about
1040 cycles to multiply. With four port selections, MM(n) takes four passes,
about 4 x 1034 cycles, which roughly matches the load time. That is why four
selections cost only about 15% more than one here. The input load of each
port selection goes to both banks, so a matrix instruction always finds its
inputs in the same bank as its weights.

The 1024 x 512 layer splits its reduction over two matrix instructions: the
second covers weight rows 512..1023 with `acc` = 1. This exercises
accumulation across instructions, which a compiler needs for layers deeper
than a tile.

## Arithmetic

* **Data**: signed 8-bit throughout. Products are summed in 32 bits.
* **MADD**: `y = sat8((acc + (bias << s)) >>> s)`, followed by
  `max(y, 0)` if ReLU is set. The shift `s` places the binary point per layer.
  The reference program uses `s = floor(log2(din)/2) + 1`.
* **MAXP**: for row r in group g, `y[r][c] = max over r' != r in g of x[r'][c]`.
  This is the aggregation "max over the other UEs of the cell". A group of one
  row yields -128.
* **CONCAT**: copies a column range. With the plan above this places x1 next
  to the max-pooling result, so MLP2 reads [x1, max] as one 1024-wide input.
* **NORM**: for each group (one port selection), `s = sum x^2` over its K x 2N
  entries, `r = floor(target * 2^16 / isqrt(s))` and `y = sat8((x * r) >>> 16)`.
  After scaling, the beamforming matrix's total power is `target^2`, which
  corresponds to the per-cell power budget P. The square root and the
  division are bit-serial (16 and 32 cycles per group).

## Timing summary

| operation                   | cycles                                              |
|-----------------------------|-----------------------------------------------------|
| weight tile load            | depth x 4 beats (memory-limited)                    |
| matrix instruction          | passes x (depth + 10), passes = ceil(M/4)           |
| MADD                        | M/4 x cols + 1                                      |
| MAXP, CONCAT                | about M/4 x cols                                    |
| NORM                        | 2 scans of M/4 x cols plus about 50 per group       |
| write-back                  | 4 per beat                                          |
| full network, 1 selection   | 417,539 (weights alone: 396,288 beats)              |
| full network, 4 selections  | 479,305                                             |

The published prototype reports 392,636 to 610,442 cycles for one port
selection and 399,418 to 622,246 for four. This design lands inside the first
range. Its four-selection overhead (15%) is larger than the published one
(about 2%), because here the cores are sized to just match the bus at four
selections. More arrays (`NUM_SA`) would shrink that overhead.

## What follows the published design and what does not

These parts follow the published design:

* the three instruction classes;
* the unit list: internal and external control, memory read and write,
  ping-pong double buffer with weight, input and bias regions, multiple
  systolic arrays of 4x4 PEs, post processing with MADD, ReLU, max-pooling,
  concatenation and normalization, and an intermediate buffer feeding the
  cores;
* the 8-bit data and the 64-bit memory path;
* the stacking of port selections as rows.

These are this design's own choices:

* the instruction encoding and the wait-mask dependency scheme;
* the number of arrays (8), the 32-column tile and every buffer size;
* output-stationary dataflow;
* the requantization formula;
* the three separate memory ports with request/stream handshakes (an AXI
  interconnect to a single memory controller would sit outside);
* the host register map;
* the `perf_ev` event outputs.

Normalization differs from the published algorithm. The published algorithm
writes the output stage as "sqrt(P) times LayerNorm", while the optimization
problem requires the beamformers of a cell to meet a total power budget. This
RTL scales each group to a fixed Frobenius norm, which meets the power budget
exactly. Per-feature layer normalization with learned gain and offset is not
implemented.

Capacity limits at the defaults: up to 16 rows (for example 4 selections of
4 UEs, or 2 of 8), up to 64 input columns, layer inputs up to 1024 deep in one
instruction (deeper with `acc`), and up to 4096 live activation columns. With
K not a multiple of 4, the host packs several selections into one row group
in memory.

## Parameters (top level)

| parameter | default | meaning                                         |
|-----------|---------|-------------------------------------------------|
| SA_ROWS, SA_COLS | 4, 4 | PE grid of one systolic array             |
| NUM_SA    | 8       | arrays; output tile is NUM_SA x SA_COLS columns |
| MAXROWS   | 16      | rows = UEs x concurrent port selections         |
| WDEPTH    | 1024    | weight-tile rows per bank                       |
| BDEPTH    | 1024    | bias bytes per bank                             |
| INCOLS    | 64      | input-region columns                            |
| ICOLS     | 4096    | intermediate-buffer columns                     |
| PF_DEPTH  | 8       | instruction prefetch queue                      |

## Verification

Every RTL block has a self-checking testbench in `tb/` that compares its
output with an independent model and prints
`TB_RESULT checks=<n> failures=<n>`. The end-to-end harness `tb/gnn_run.sv`
builds weights and inputs from a hash of their indices, compiles the program,
runs it through the host registers and checks every output byte against a
bit-exact behavioural model of the network. It also counts each mechanism
through `perf_ev`, and any mechanism that never occurs counts as a failure.
The mechanisms are: load/compute overlap, both banks, accumulation,
multi-pass matrix operations, every post-processing operation, input loads,
write-backs, saturation, dispatch stalls and memory stalls.

* `tb_fas_gnn_accel`: reduced network (widths 64/32), random memory stalls,
  two selections then one. Runs in well under a second.
* `tb_fas_gnn_full`: the full network at default parameters, one selection
  then four. It checks the outputs, checks that the one-selection latency
  falls within the published range and that four selections take at most 25%
  longer. It runs in about 5 s of simulation after a short build.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fas_gnn_full \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/fas_pkg.sv tb/tb_fas_gnn_full.sv
./obj_dir/Vtb_fas_gnn_full
```

Replace the top module name to run any other testbench, for example `tb_pe`,
`tb_post_proc` or `tb_inst_ctrl`.
