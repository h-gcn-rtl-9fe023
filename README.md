# H-GCN layer engine in SystemVerilog

A graph convolutional network (GCN) layer computes `out = sigma(A * X * W)`. `A` is
the normalised adjacency matrix of the graph: huge and very sparse. `X` holds the
vertex features and `W` is a small dense weight matrix. H-GCN splits this work across
the three kinds of compute on a Versal ACAP, based on how the graph looks after its
vertices have been reordered into communities:

* tightly clustered parts of `A` (64x64 tiles at 50% density or more) go to dense
  tensor PEs;
* loosely clustered parts (between 1% and 50%) go to sparse tensor PEs. Each of
  these runs a row-wise sparse product with padded, fixed-length rows;
* scattered vertices (below 1%) go to an SpMM unit in the programmable logic.

The layer is computed combination-first, `A * (X * W)`. The product `B = X * W` is
computed first by a dense systolic array. `A * B` then starts on the first finished
rows of `B` while the dense array is still producing the rest.

This RTL builds that engine as synthesizable logic. The AI-engine parts, which the
original design runs as software on VLIW vector processors, are built here as hardware
processing elements. Each has the same tiles, dataflow and loop structure.

## Block diagram

```
               start/cfg, busy/done (platform controller)
                          |
        +-----------------v------------------+      read channel (req id, in order)
        |            pl_controller           |<====> write channel      (memory)
        |  dense sequencer | sparse sequencer|
        +--+----------+----------+------+----+
           |          |          |      |
   X,W tiles     A tiles,B tile  |   partial sums
           |          |          |      |
   +-------v---+ +----v-------+ +v------v--+   +----------+
   | tpe_array | | stpe_array | | pl_spmm  |-->| act_unit |--> out words
   | 4 x 50 TPE| | 4 x 50 STPE| | row-wise |   |  (ReLU)  |
   +-----------+ +------------+ +----------+   +----------+
```

`hgcn_top` wires these five blocks together. The platform controller, the network on
chip and the DDR memory are outside the top; their signals are ports of the top.

## Numbers and sizes

| quantity | value | where it matters |
|---|---|---|
| element | 32 bit, two's-complement integer, wrapping | all arithmetic (see "Departures") |
| word | `LANES` = 8 elements = 256 bit | every stream, memory word, MAC step |
| X*W tile | 32 x 32 | `TILE_D`, one TPE |
| A*B tile | 64 x 64 of A by 64 x 32 of B | `TILE_S`, one STPE |
| array | `ROWS` = 4 rows x `COLS` = 50 columns, for each of the two arrays | `hgcn_top` parameters |
| hidden width | `ROWS*32` = 128 | columns of W, B and the output |
| vertices per layer | `2*COLS*32` = 3200 | rows of A, B, output |
| input features | any multiple of 32 (`cfg.kx` tiles, up to 65535) | rows of W |

The dense array covers 50 x 32 = 1600 rows of `X` at a time. A layer therefore takes
two row passes to produce the 3200 rows of `B` that the 50 x 64 rows of the sparse
array consume.

## Dataflow of one layer

### Dense array: `B = X * W`

TPE `(r, c)` owns the block `B[c*32 .. c*32+31, r*32 .. r*32+31]` of the current row
pass. For each 32-wide feature tile `kf`:

1. The controller reads W tile `(kf, r)` and sends it in at the left PE of row `r`.
   It moves right, one PE per cycle, so the whole row gets it.
2. The controller reads X tile `(pass, c, kf)` and sends it in at the bottom PE of
   column `c`. It moves upward through the column.
3. After `ROWS+COLS+2` cycles every PE holds its two tiles. One `go` pulse starts
   them all. Each PE does `acc[i][q] += X[i][k] * W[k][q*8 .. q*8+7]`: 8 multiply-adds
   per cycle, 4096 cycles per tile. `first` restarts the accumulator at `kf = 0`.

After the last feature tile, the controller writes the pass's 1600 x 128 block of `B`
to memory. It then raises its count of available `B` rows.

### Sparse array and PL SpMM: `A * B`

STPE `(r, c)` owns the output block `[c*64 .. c*64+63, r*32 .. r*32+31]`. It
accumulates over the 50 column tiles `kt` of `A`. For each `kt` the sparse sequencer
does the following:

1. It waits until the dense side has written `B` rows up to `64*(kt+1)`. The first 25
   tiles need only the first pass, so `A * B` on them overlaps the second `X * W` pass.
   The top's `dense_active` and `sparse_active` outputs make this overlap visible.
2. For every column `c` it reads a pointer and then the A tile `(c, kt)`. The tile
   enters at the top PE of the column and moves down.
3. It reads the 64 x 128 tile of `B` once and broadcasts it. Words `r*4 .. r*4+3` of
   each row go in at the left of STPE row `r`. Every word also goes to the PL SpMM.
4. It starts the STPEs. It then streams the PL SpMM the list of non-zeros that the
   STPEs do not handle for this `kt`. It waits for both to finish.

After the last `kt`, each output word is formed from three parts. The STPE partial and
the PL partial are added, and the sum passes through the activation. The result is
written to `out_base`.

### STPE tile format and the grouping idea

A sparse product with a different non-zero count in every row has variable inner loop
bounds, which is what made it slow on the AI engines. The fix is to group consecutive
rows and pad each row of a group to the group's largest count. Each group then runs
loops with fixed trip counts. The STPE keeps this structure:

```
word 0        lane0 = mode (0 skip, 1 sparse, 2 dense), lane1 = groups G, lane2 = words that follow
sparse:       G words (lane0 = rows in group, lane1 = non-zeros per row)
              then entries row after row, 4 (column, value) pairs per word, padding = (0, 0)
dense:        512 words, the 64x64 tile row-major
skip:         nothing
```

The compute loop is group -> row -> entry -> output word:
`acc[row][q] += value * B[column][q]`. It takes one cycle per word and one cycle for
an empty group. A sparse tile costs `sum(rows x nnz) x 4` cycles and a dense tile
costs 16384. Padding entries cost cycles just as real ones do.

Building this format is a software step, done once per graph before the run. The
testbench package `tb/hgcn_tb_pkg.sv` contains a model of it. The steps are:

* Each 64x64 tile gets a mode from its density: dense at 50% or more, sparse from 1%,
  otherwise skip.
* In sparse mode, each row keeps at most `cap` non-zeros. The rest go to the PL list.
  This is the coverage step of the original generator, which pads tiles to the count
  that covers most rows and leaves the excess to the PL.
* Rows are grouped with a moving-average rule. Keep the running mean of the row counts
  since the group began. When a new row moves it by a relative amount of `tau` or
  more, start a new group at that row.

### PL SpMM

The PL SpMM is a row-wise-product engine. Its input is a list of
`{row, column, value, flag}` entries, two per word. For each entry it does
`C[row][:] += value * B[column][:]`, 16 words of 8 lanes per non-zero. `flag = 0`
marks a padding entry, which costs one cycle. `C` holds all 3200 output rows. A valid
bit per row clears it in one cycle at the start of a layer. While it works it holds
`e_ready` low, so the memory channel sees back-pressure.

## Memory interface and layouts

Addresses count 256-bit words. The read channel takes requests
(`rd_req_valid/addr/id/ready`). Data comes back in request order with the request's id
(`rd_data_valid/data/id/ready`): id 0 is the dense sequencer, id 1 the sparse one.
When both sequencers have requests, the channel grants them alternately.
`rd_data_ready` is low only while the PL SpMM cannot take an entry word. Writes use
`wr_valid/addr/data/ready`.

`cfg` (`layer_cfg_t` in `hgcn_pkg`) gives the layout of one layer:

| field | contents |
|---|---|
| `x_base` | X, row-major, `kx*4` words per vertex |
| `w_base` | W, row-major, 16 words per input feature |
| `b_base` | B = X*W, row-major, 16 words per vertex (written by the engine, read back) |
| `a_ptr_base` | word `kt*COLS + c`: lane0 = address, lane1 = length of A tile `(c, kt)` in the STPE format |
| `pl_ptr_base` | word `kt`: lane0 = address, lane1 = length of the PL entry list of column tile `kt` |
| `out_base` | layer output, same layout as B |
| `kx`, `act_en` | number of 32-wide feature tiles; apply ReLU |

The output layout is the input layout of the next layer with `kx = 4`. A two-layer GCN
is therefore two commands, and the second reads the first one's `out_base`.

## Timing

All figures are in clock cycles at the default size.

* TPE tile product: 4096 cycles. Each feature tile also costs 6912 words of loading
  plus the settle time. One pass drains 25,600 words of `B`.
* STPE: 4 cycles per kept or padded non-zero, 16384 for a dense tile.
* PL SpMM: 16 cycles per non-zero.
* Loads into the arrays take one word per cycle, when memory allows.

The full-size test layer has 32 input features, with about 10% dense, 50% sparse and
40% scattered tiles. It takes about 1.32 million cycles. Most of that time is the
sparse side, which waits for memory and the PL SpMM.

`tb_hgcn_cora` runs a graph with the sizes of the Cora citation graph: 2708 vertices
padded to 3200, 1433 features padded to 1440 (45 feature tiles), and about 10,000
edges (0.14%). The edges are random, but placed the way reordering leaves them: 3% dense
in the diagonal 64x64 tiles, which become sparse STPE tiles, and 0.07% elsewhere, which
goes to the PL. Layer 1 takes about 1.35 million cycles, most of it the 45 feature tiles
of `X * W`. Layer 2 (128 features) takes about 0.35 million.

## Files

| file | block |
|---|---|
| `rtl/hgcn_pkg.sv` | shared types: word, element, tile modes, layer command |
| `rtl/tpe.sv`, `rtl/tpe_array.sv` | dense tensor PE and the 4 x 50 dense array |
| `rtl/stpe.sv`, `rtl/stpe_array.sv` | sparse/dense tensor PE and the 4 x 50 sparse array |
| `rtl/pl_spmm.sv` | PL row-wise SpMM |
| `rtl/pl_controller.sv` | sequencers, memory channels, result merge |
| `rtl/act_unit.sv` | activation (ReLU) |
| `rtl/hgcn_top.sv` | top level |
| `tb/tb_<block>.sv` | one self-checking test per block |
| `tb/hgcn_tb_pkg.sv` | tile encoder (grouping, capping, PL lists) |
| `tb/hgcn_env.sv` | memory model, random graph, reference model, mechanism counters |
| `tb/tb_hgcn_top.sv` | 2 x 2 arrays, two layers |
| `tb/tb_pl_controller.sv` | 2 x 4 arrays, two layers |
| `tb/tb_hgcn_full.sv` | full size, one layer |
| `tb/tb_hgcn_cora.sv` | full size, two layers on a graph of Cora's size |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. Build
with Verilator, listing the packages first and letting it find the rest:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/hgcn_pkg.sv tb/hgcn_tb_pkg.sv tb/tb_hgcn_top.sv --top-module tb_hgcn_top
./obj_dir/Vtb_hgcn_top
```

The block tests take well under a second. `tb_hgcn_full` takes about 1.5 minutes to
build and about 1 minute to run. `tb_hgcn_cora` takes a few minutes to build and about
1.5 minutes to run. The whole-design tests print how often each
mechanism occurred. A mechanism that never occurs counts as a failure. The mechanisms
are:

* dense, sparse and skipped tiles (the Cora-shaped graph has no dense tiles, so there
  this one is only reported);
* non-zeros handled by the PL;
* dense/sparse overlap cycles;
* read stalls caused by the PL;
* values clipped by the ReLU.

To change the array size, set `ROWS` and `COLS` on `hgcn_top`. `ROWS` and `COLS` must
both be at least 2. The number of vertices per command follows as `2*COLS*32`.

## Departures from the original design and open points

* **Arithmetic.** The original works in IEEE single precision. Here elements are 32-bit
  integers, and products and sums wrap modulo 2^32. The results can therefore be
  checked exactly. Replacing `mac_word` in `hgcn_pkg` with a floating-point
  multiply-add, and `act_unit`'s sign test with a float one, would restore the
  original number format. The cycle counts above assume a single-cycle MAC.
* **Vector width.** 8 lanes, following the 8-wide reads of the original kernel. The AI
  engine's vector unit itself is 512 bits, which would be 16 lanes.
* **Reuse of the dense rows.** In the original, the four dense rows become sparse PEs
  once `X * W` is done. Here the two arrays are separate and the dense array sits idle
  after its second pass.
* **Pipelining granularity.** `A * B` waits for a whole 1600-row pass of `B`, not for
  each 32x32 tile. All columns of the dense array finish together.
* **Exponential.** The activation block of the original also names an exponential
  function. Only ReLU is built.
* **Result merge.** Nothing in the original says how the AI-engine and PL partial sums
  are combined. Here the PL keeps a full output buffer, and the controller adds the two
  partial sums while writing the result.
* **Memory system.** The DDR controller, the network on chip and the prefetch cache
  are represented only by the read/write channel at the top. The controller does not
  double-buffer: tiles for the next step are fetched after the current step ends.
* **Graph size.** One command covers 3200 vertices. Larger graphs would need partial
  outputs accumulated across column blocks of `A`, which this engine does not do.
  Among the evaluated graphs, only Cora (2708 vertices) fits.
* **Software steps.** Graph reordering, grouping and PE selection are done before the
  run, on a processor. They are not part of this RTL.
* **Reset.** Reset is asynchronous and active-low for control state only. Data memories
  are written before they are read, or masked by valid bits.
