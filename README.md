# A 32 × 32 weight-stationary systolic array, as an asymmetric-floorplan design

In a weight-stationary systolic array the two directions of the array do not
carry the same kind of data. Across each row runs the input bus: a 16-bit
activation that every processing element (PE) passes to its neighbour. Down
each column runs the partial-sum bus. Every PE adds its product to it, so it
must be wide enough for the whole column's sum: 37 bits for 32 products of
16 × 16 bits. The vertical bus is also the busier one. Partial sums are
signed and change sign often. Activations after ReLU are non-negative and
often zero.

The paper "The Case for Asymmetric Systolic Array Floorplanning" (Peltekis,
Filippas, Dimitrakopoulos, Nicopoulos) draws a physical conclusion from this.
PEs should not be laid out as squares. They should be laid out as rectangles,
wider than they are tall, so that the expensive vertical wires get shorter.
It reports about 9 % less interconnect power and about 2 % less total power
for a 32 × 32 array in 28 nm at 1 GHz, running ResNet-50 layers.

The floorplan itself is a place-and-route decision and has no RTL. This
repository gives synthesizable SystemVerilog for the accelerator the paper
lays out: the 32 × 32 array, its PEs, the input, weight and output buffers
around it, the staggering logic, the column accumulators, and a sequencer.
It also gives self-checking testbenches. The same RTL serves for the square
layout and for the rectangular one.

## Why the PE should be 3.8 times wider than tall

Let each PE have a fixed area `A = W·H`. There are `R × C` PEs. Each row
bus of `B_h` bits crosses `C` PEs of width `W`. Each column bus of `B_v` bits
crosses `R` PEs of height `H`. The total wire length is then

    WL = R·C·(W·B_h + H·B_v) = R·C·(A·B_h/H + H·B_v)

Setting `dWL/dH = 0` gives `W/H = B_v / B_h`. Weighting each bus by its
average switching activity `a` turns the length into switched capacitance,
and the optimum becomes

    W/H = (B_v · a_v) / (B_h · a_h)

The paper uses `B_h = 16` and `B_v = 37`. It measured `a_h = 0.22` and
`a_v = 0.36` over ResNet-50 on ImageNet images. That gives 3.78, and the
paper uses 3.8. Nothing in the RTL depends on this number. What the RTL
fixes is the two bus widths that feed the formula. `BH` is the width of
`a_in`/`a_out` and of `w_in`/`w_out` in `pe.sv`, and `BV` is the width of
`psum_in`/`psum_out`. To apply the result, a floorplan gives each `pe`
instance of `systolic_array` (`g_row[r].g_col[c].u_pe`) a region with this
aspect ratio.

The workload testbench (`resnet_layers_tb`, see below) measures both
activities on this RTL. It probes the PEs on the array's diagonal over all
six ResNet-50 layers. The activations are synthetic: non-negative, about
half zero, and spatially uncorrelated. The weights are uniformly random
16-bit values, not a trained network's. Under these conditions it measures
`a_h = 0.26` and `a_v = 0.36`, which gives `W/H = 37·0.36 / (16·0.26) ≈ 3.2`.
The asymmetry is the same one the paper reports. The exact numbers depend on
the data. They are counted over every cycle of an operation, including
preload and drain, when the buses carry zeros. Layers with short
operations (14 × 14 outputs) therefore show lower activity (0.22 / 0.30)
than the 56 × 56 layer (0.34 / 0.46).

## Block diagram

```
                 host writes weight-tile rows
                           |
                  +-----------------+
                  |  weight_buffer  |  C banks x 1024 x 16 b      (north)
                  +-----------------+
                           | w_north[C]   (w_shift: preload)
   host writes             v
   input vectors   +-------------------------------+
        |          |        systolic_array         |
 +--------------+  |   R x C  pe                   |
 | input_buffer |->|   a: west -> east (16 b)      |
 | R banks x    |  |   psum: north -> south (37 b) |
 | 4096 x 16 b  |  |   w: north -> south (preload) |
 +--------------+  +-------------------------------+
   (west)  |               | psum_south[C]
           v               v
     skew_buffer      skew_buffer (REVERSE)    de-stagger the columns
     (row r +r cyc)        |
                     col_accumulator x C       adder + register with feedback
                           |
                  +-----------------+
                  |  output_buffer  |  C banks x 4096 x 37 b      (south)
                  +-----------------+
                           |
                  host reads result vectors

          sa_controller sequences all of it: preload, stream, drain
```

`asym_sa_top` wires these blocks together. Each file in `rtl/` holds one
module, and each starts with a comment on its interface and timing.

| file | contents |
|---|---|
| `sa_pkg.sv` | default sizes, controller state type |
| `pe.sv` | processing element |
| `systolic_array.sv` | R × C grid of `pe` |
| `skew_buffer.sv` | triangular delay lines (input stagger, output de-stagger) |
| `col_accumulator.sv` | per-column adder and register at the south edge |
| `sram_bank.sv` | one memory bank, 1 write and 1 read port |
| `input_buffer.sv`, `weight_buffer.sv`, `output_buffer.sv` | banked buffers on the west, north and south edges |
| `sa_controller.sv` | operation sequencer |
| `asym_sa_top.sv` | the accelerator |

## The processing element

```
            w_in (16)        psum_in (37)
              |                  |
           [W reg]<-w_shift      |
              |---------+        |
              |         v        v
  a_in (16) --+------> (x) ---> (+)
              |      32 b        |
              v                  v
           w_out            [psum reg] --> psum_out (37)
  a_in --> [a reg] --> a_out
```

The PE holds one weight in register W. While `w_shift` is high, W loads
`w_in` and passes its old value down through `w_out`, so a column of PEs
shifts weights like a shift register. In every cycle the PE forms
`psum_out ← psum_in + a_in × W` and `a_out ← a_in`. Both are registered.
Operands are signed 16-bit two's complement. The 32-bit product is
sign-extended to 37 bits. 32 such products can never overflow 37 bits,
because `|a·w| ≤ 2^30`. The adder still wraps modulo 2^37.

## Dataflow and timing

This section is the one to read before changing anything. The array has
no valid bits inside. Correctness depends only on every element arriving in
the right cycle.

**Preload.** The weight tile `W` is R × C. Its row `r` holds the weights
of array row `r`. It is stored in the weight buffer at rows
`w_base … w_base+R-1`. The controller reads those rows in reverse order, one
per cycle, starting with `w_base+R-1`. `w_shift` is asserted one cycle after
each read, to cover the buffer's read latency. After R shifts, the row read
first has moved down to the bottom of the array, and row `r` of the tile
sits in PE row `r`. The weights stay there for the rest of the operation.

**Streaming.** Input vector `n` is R activations, one per array row. It is
read from the input buffer in stream cycle `n`. The forward `skew_buffer`
delays element `r` by `r` cycles. Element `r` then meets the partial sum
coming down from row `r-1` of the same column in the same cycle. Because
inputs also move one PE east per cycle, column `c` sees the vector `c` cycles
after column 0. Column `c`'s dot product therefore leaves the bottom row `c`
cycles later than column 0's. The reverse `skew_buffer` delays column `c` by
`C-1-c` cycles, so all C results of vector `n` arrive at the accumulators
together.

Counted from the cycle in which the input vector is read:

| stage | cycles |
|---|---|
| input buffer read | 1 |
| stagger + array + de-stagger | R + C − 1 |
| column accumulator register | 1 |
| write into the output buffer | in that cycle |

The controller carries a valid bit and a "first" bit through an
`R + C`-stage shift register that matches this path. That pair drives the
accumulators' `en`/`first`. The accumulators' `q_valid` is the output buffer's
write strobe. With the defaults, the result of the input vector read in
stream cycle `n` is written `R + C + 1 = 65` cycles later.

**Whole operation.** A command accepted in cycle `s` with `N` vectors
runs as follows:

* weight reads in cycles `s+1 … s+R`;
* input reads in cycles `s+R+1 … s+R+N`;
* output writes in cycles `s+2R+C+2 … s+2R+C+N+1`;
* `done` in cycle `s + 2R + C + N + 2`.

With the defaults, `N + 98` cycles produce `N × 32` dot products of
length 32. During streaming, the array completes one input vector per cycle.
The weights are not double-buffered. The next operation's preload therefore
starts only after the current operation has drained. This costs
`2R + C + 2` cycles per operation.

## Driving the accelerator

Host ports of `asym_sa_top` (plain signals, all synchronous to `clk`;
`rst_n` is an active-low synchronous reset):

| port | meaning |
|---|---|
| `ib_wr_en`, `ib_wr_addr[11:0]`, `ib_wr_data[R][16]` | write one input vector (element `r` for array row `r`) |
| `wb_wr_en`, `wb_wr_addr[9:0]`, `wb_wr_data[C][16]` | write one weight-tile row (element `c` for array column `c`) |
| `ob_rd_en`, `ob_rd_addr[11:0]` → `ob_rd_data[C][37]` | read one result vector, one cycle latency, held until the next read |
| `cmd_valid` / `cmd_ready` | start an operation; `cmd_ready` is high only when idle |
| `cmd_w_base`, `cmd_a_base`, `cmd_o_base` | weight tile row 0, first input vector, first result address |
| `cmd_n_vec[12:0]` | number of input vectors, 1 … 4096 |
| `cmd_accumulate` | 0: each result is its own dot product; 1: the accumulators keep running sums over the N vectors |
| `busy`, `done` | operation in progress; one-cycle pulse when the last result is written |

The result written at `o_base+n` is, for each column `c`:

    out[n][c] = Σ_r  A[a_base+n][r] · W[w_base+r][c]          (mod 2^37)

With `cmd_accumulate = 1`, the result at `o_base+n` is the sum of those
values over vectors `0 … n`. This is the feedback path of the column
accumulators.

Buffers may be written while an operation runs. They have separate read and
write ports. Keeping the host's writes away from the regions in use is the
host's job.

**Mapping a convolution.** A convolution with kernel K, output H × W, C input
channels and M output channels becomes the product of two matrices. One is
the im2col matrix, with H·W rows and K·K·C columns. The other is the weight
matrix, with K·K·C rows and M columns. The reduction dimension K·K·C is cut
into tiles of 32. The M output channels are also cut into tiles of 32. Each
pair of tiles is one operation, with N = H·W vectors. Partial results of
successive reduction tiles must be added outside the accelerator. The array
sums exactly 32 products per column, which is what the 37-bit column width
covers. A full 3 × 3 × 256 reduction needs 44 bits.

## Sizes

| parameter | default | origin |
|---|---|---|
| `R`, `C` (array rows, columns) | 32, 32 | the evaluated design |
| `BH` (input and weight width) | 16 | the evaluated design (16-bit integer quantisation) |
| `BV` (partial-sum width) | 37 | the evaluated design (32 products of 32 bits) |
| `A_DEPTH` (input and output buffer words per bank) | 4096 | this design: holds the 56 × 56 = 3136 output pixels of the largest layer |
| `W_DEPTH` (weight buffer words per bank) | 1024 | this design: 32 weight tiles |

The defaults live in `sa_pkg` and every module takes them as parameters.
The testbenches use 4 × 5, 4 × 6 and 32 × 32 arrays. `BV` must be at
least `2·BH` (checked at elaboration). At the defaults the design has about
71 k flip-flop bits of logic (almost all in the 1024 PEs) and 7.5 Mbit of
buffer memory.

How the ResNet-50 layers of the evaluation fit (layer sizes from the paper;
the mapping is the one described above):

| layer | K, H×W, C, M | N per op | ops (reduction × channel tiles) | weight tiles vs 32 held |
|---|---|---|---|---|
| L1 | 1, 56×56, 256, 64 | 3136 | 8 × 2 = 16 | fit |
| L2 | 3, 28×28, 128, 128 | 784 | 36 × 4 = 144 | reloaded |
| L3 | 1, 28×28, 128, 512 | 784 | 4 × 16 = 64 | reloaded |
| L4 | 1, 14×14, 512, 256 | 196 | 16 × 8 = 128 | reloaded |
| L5 | 1, 14×14, 1024, 256 | 196 | 32 × 8 = 256 | reloaded |
| L6 | 3, 14×14, 256, 256 | 196 | 72 × 8 = 576 | reloaded |

Every single operation fits the buffers. No whole layer fits at once: the
host streams tiles in and results out between operations.

## What follows the paper and what does not

The following come from the paper:

* the weight-stationary dataflow;
* the PE structure: W register, multiplier, adder, registered east input,
  registered south sum;
* weights preloaded from the north, inputs from the west, results to the
  south;
* banked local memories on the west and north edges, and an output buffer
  on the south edge;
* a per-column adder with a fed-back register in front of the output buffer
  (drawn, not described);
* the 32 × 32 size and the 16-bit and 37-bit widths.

The following are this design's own choices. The paper is silent on them:

* **Number format.** The paper says the activations are non-negative and
  that the sums are signed. It also derives 37 bits from "32 products of 32
  bits". Both fit signed 16-bit operands with non-negative activation
  values, so both operands are treated as signed. With unsigned activations
  times signed weights, a product needs 33 bits and a column sum 38.
* **Preload mechanism.** Weights shift down through the W registers under
  `w_shift`. They are not double-buffered, so preloading does not overlap
  computation.
* **Stagger and de-stagger.** These are register delay lines (`skew_buffer`).
  The paper shows only the staggered operands.
* **Column accumulator control.** The `first`/`en` interface, and the
  accumulate mode that uses the feedback path. The paper does not say what
  the feedback is used for.
* **Buffers.** Depths, one read and one write port per bank, whole-vector
  host access, zeros out of the input and weight buffers in idle cycles,
  and no reset of memory contents.
* **Sequencer and host interface.** The command format, the valid/ready
  handshake, `done`, and the synchronous active-low reset.
* **Reduction across tiles.** Partial results of successive reduction tiles
  are summed outside the accelerator.

The paper's physical results are outside what RTL can show: the 3.8 aspect
ratio, the 28 nm implementation at 1 GHz, and the power figures. Running the
testbenches here checks function and cycle timing, not power.

## Simulating

All testbenches are self-checking and finish with a line
`TB_RESULT checks=<n> failures=<m>`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sa_pkg.sv tb/asym_sa_top_tb.sv \
          --top-module asym_sa_top_tb -o sim && obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `pe_tb` | PE arithmetic against a reference, including −32768 × −32768 and sums near 2^37; register behaviour |
| `systolic_array_tb` | a 4 × 5 array: two weight tiles, every result checked in the exact cycle `n + R + c` |
| `skew_buffer_tb` | lane delays in both directions |
| `col_accumulator_tb` | random load/add/hold sequences |
| `input_buffer_tb`, `weight_buffer_tb`, `output_buffer_tb` | read-back with one-cycle latency, concurrent writes, idle behaviour |
| `sa_controller_tb` | every strobe of 10 operations, cycle-exact, as in the timing section |
| `asym_sa_top_tb` | end to end on a 4 × 6 array: 6 operations, plain and accumulating, a command held while busy, tile changes, sparse and extreme inputs; checks all results and `2R+C+N+2` latency, and that each of these cases occurred |
| `asym_sa_top_full_tb` | the same test at the default size (32 × 32, default buffers), N = 256 |
| `resnet_layers_tb` | at the default size, all six ResNet-50 layers in full: im2col data (with padding for 3 × 3), every reduction and channel tile (1184 operations in all), partial results summed, and every output compared with a directly computed convolution; also measures `a_h`, `a_v` and the resulting optimal `W/H`, and checks `a_h ≤ a_v` |

The full-size tests each take under a minute in Verilator, most of it
compilation; the six complete layers simulate in about 15 seconds. The tests use only two-state logic. Inputs are driven on the
falling clock edge and outputs are sampled there.
