# BenDi: a quasi-stochastic systolic array for ECG inference, in SystemVerilog

Small CNNs that classify heartbeats or detect sleep apnea from an ECG spend
nearly all their time in multiply-accumulate operations. BenDi makes the
multiply cheap by borrowing from stochastic computing. Each operand is a
Bent-Pyramid (BP) code. A BP code is a short, fixed bit pattern in which the
value is carried by which bits are set. The product of two such codes is
approximated by the number of ones in their bitwise AND. So a multiplier is
eight AND gates and a small ones counter. The codes are deterministic, which
means no random-number generators are needed, and each product takes one
cycle. Everything after the multiply stays in ordinary binary arithmetic.

This RTL implements the architecture described in *BenDi: An
Energy-Efficient Quasi-Stochastic Systolic Architecture for Edge
Bioelectronics* (Ye, Pan, Agwa, Prodromakis). It has four 16x16 arrays of BP
processing elements, an accumulator and a host interface. Each array runs the
DiP ("diagonal input, permuted weights") weight-stationary dataflow. The
published parts are the processing element, the ones counter, the array and
its dataflow. The accumulator, the interface and the way the blocks are wired
together are only named or drawn in outline in the source, so this design
fills them in. Each such choice is marked below.

## The BP9 operand and what one product is worth

An operand is 9 bits, `bendi_pkg::bp9_t`:

| bit | field  | meaning                              |
|-----|--------|--------------------------------------|
| 8   | `sign` | 1 = negative                         |
| 7:0 | `mag`  | BP8 magnitude code (a bit pattern)   |

The hardware defines the value of a product exactly:

    product(a, b) = (a.sign XOR b.sign ? -1 : +1) * popcount(a.mag AND b.mag)

The result is an integer in -8..+8. The hardware never needs to know which
real number a code stands for. That mapping lives entirely in the offline
quantizer, which is not part of this RTL. In the BP scheme, weights and
activations are coded from two different, complementary code books, chosen so
that the AND of two codes has about as many ones as the product of their
values. Those code books are not reproduced here. Every testbench therefore
uses random 9-bit patterns and checks the exact rule above.
`bendi_pkg::bp9_mul` gives the rule as a function, for anyone writing a model.

## Processing element (`bpe`)

```
 x_in ──►[x reg]──┬──────────────────────────────► x_out (diagonal neighbour)
 w_in ──►[w reg]──┼──┬───────────────────────────► w_out (BPE below)
  (w_load enable) │  │
        mag AND mag (8 gates) ─► parallel_counter ─► 4-bit count
        sign XOR sign ─────────────────────┐
        {0,count} XOR {5{s}}  +  s  ─► 5-bit signed product
 psum_in (16b) ─────────────────► + ─►[psum reg]─► psum_out (16b, BPE below)
```

- The activation register loads every cycle.
- The weight register loads only while `w_load` is high.
- Negation is done in one's complement: five XOR gates invert the
  zero-extended count. The sign bit is then added as the "+1".
- `psum_out` after a clock edge equals `psum_in` plus the product of the
  register contents from the previous cycle.
- A column has 16 rows, so a column sum lies within ±128. It never overflows
  16 bits.

## Ones counter (`parallel_counter`)

The counter is a carry-save tree of seven one-bit adders (`full_adder`,
`half_adder`):

| level | adders | inputs | outputs |
|-------|--------|--------|---------|
| 1 | HA, FA, FA | bits {7,6}, {5,4,3}, {2,1,0} | three sums (weight 1), three carries (weight 2) |
| 2 | FA, FA | the three sums / the three carries | **count[0]**; two weight-2 terms, one weight-4 term |
| 3 | HA, HA | weight-2 terms / weight-4 terms | **count[1]**; **count[2]**, **count[3]** |

The adder types, how many sit on each level and the level-1 inputs follow the
published drawing. The wiring between levels is the one arrangement of those
adders that counts correctly.

## The array and the DiP dataflow (`bdsa`)

This part is the hardest to follow, and it is what removes the usual skew
buffers.

A conventional weight-stationary array staggers its inputs. Row *k* of the
input matrix enters column *k* one cycle later than row *k-1*, and the
outputs leave equally staggered. Triangular FIFOs on both sides deskew them.
DiP avoids this as follows:

1. **Whole input rows enter at once.** All 16 elements of an activation row
   enter the top row of BPEs in the same cycle.
2. **Activations move diagonally.** Each cycle, a value moves from BPE (i, j)
   to BPE (i+1, j-1). A value leaving column 0 wraps round to column 15 of
   the next row. BPE (i, j) therefore sees input element `(i + j) mod 16` of
   the row that entered *i* cycles earlier.
3. **Weights are permuted to match.** Column *j* computes output *j*, so
   BPE (i, j) must hold `W[(i + j) mod 16][j]`. Each column holds one filter,
   rotated upwards by the column index.
4. **Partial sums move down one row per cycle,** at the same speed as the
   activations. Each column sum meets exactly the activations of its own input
   row. All 16 outputs of a row leave the bottom in the same cycle.

Example for column 1, filter elements e0..e15:

```
row  0: e1    row  1: e2   ...   row 14: e15    row 15: e0
```

**Timing.** An input row presented with `x_valid` in cycle *t* leaves on
`out_psum` with `out_valid` in cycle *t* + 17: the input register plus 16
rows. A new row can enter every cycle. An opaque `x_tag` travels with the row
and comes out as `out_tag`.

**Weight loading.** Weights shift in from the top, one row per `w_load`
cycle, and move down the columns. The row sent last ends in row 0, so send
the permuted rows for BPE rows 15, 14, …, 0. Loading takes 16 cycles. While
weights are loading, rows still inside the array would be multiplied by the
wrong weights. Wait 17 cycles after the last streamed row before reloading.
This rule is this design's, because the source describes a single weight
register per BPE.

`x_fwd*` exposes the top row's activation registers: the input row, one cycle
late. A neighbouring array can use it to share the inputs (see below).

## Four arrays, the link, the accumulator

```
              ┌─────────┐  link   ┌─────────┐
  accumulator │ array 2 │◄────────│ array 0 │◄──► interface ◄──► host
  (4 banks)   ├─────────┤         ├─────────┤
              │ array 3 │◄────────│ array 1 │◄──►
              └─────────┘  link   └─────────┘
```

The source's floor plan places arrays 0 and 1 next to the interface. It draws
an arrow from each of them to the array beside it. In `bendi_top` that arrow
is an optional **activation link**. With `share_act[a]` set, array a+2 takes
array a's activation rows and their tags from `x_fwd`, one cycle later,
instead of its own interface lane. The pair then computes 32 output columns
of the same input rows, with array a+2 loaded with the other 16 filters.
Independently of the link, every array also has its own data lane from the
interface. This lets four arrays run four reduction tiles in parallel. The
source draws no such lanes; they are this design's choice.

The **accumulator** (`accumulator`) has one bank per array. Each bank holds
256 rows of 16 words of 24 bits. A bank does one read-modify-write per cycle:

- `first` set: the row is overwritten.
- `first` clear: the row is added to the stored row.

This is how a reduction longer than 16 is accumulated **over time**: reload
the weights, stream the same rows again with `first` clear. A reduction spread
**over arrays** lands in separate banks. The read port sums the banks chosen
by `rd_mask`, column by column, and returns the 26-bit result one cycle after
the request. Word width, depth and organisation are not given in the source.
Words wrap on overflow. Nothing in BenDi saturates.

## Host interface (`bendi_interface`)

Every array gets its own command each cycle. There is no back-pressure.

| `host_op[a]` | effect on array a |
|--------------|-------------------|
| `OP_LOAD_W` | shift weight row `host_data[a]` into the array |
| `OP_STREAM_X` | present activation row `host_data[a]`; its result goes to accumulator row `host_addr[a]` of bank a, overwriting if `host_first[a]` is set |
| `OP_NOP` | nothing |

Per-array commands let one array be loaded for the next layer while others
are still streaming the current one. The published schedule uses this to hide
the last classifier layer behind the weight loading of the first layer of the
next input.

- Commands are registered once in the interface.
- A streamed row reaches the accumulator at the end of cycle *t* + 18, where
  *t* is the command's cycle. Over the link it arrives one cycle later.
- `host_rd_en` in cycle *t* returns `host_rd_data` in cycle *t* + 2.
- A read sees every write made up to the end of the cycle it was issued in.
- Assertions flag an undefined command code and a read with an empty bank
  mask.

## Running a layer

A 1-D convolution with `Cin` channels, kernel length `KS` and `F` filters is
lowered with im2col:

- Output position *r* becomes the activation row
  `[x0[r..r+KS-1], x1[r..r+KS-1], …]`, padded with zeros to a multiple of 16.
- Filter *f* becomes weight column *f*, with the same channel-major,
  tap-minor order.
- Each array column then produces one output feature map.
- Split the reduction into KT tiles of 16 and the filters into CT tiles of 16.
- With G = 4/CT arrays per filter tile, array *a* takes filter tile a/G and
  reduction tiles a mod G, a mod G + G, …, one per pass.
- Each pass takes 16 cycles of weight loading, one cycle per output position,
  and a 17-cycle drain.
- Read each output row back with the banks of its filter tile in `rd_mask`.

A fully connected layer is the same with KS = 1 and one row per sample.
`tb/tb_conv_layers.sv` does exactly this, in SystemVerilog, for three layer
shapes.

Layers can also overlap. While a small classifier layer streams its few
rows on two arrays, a third array can take the 16 weight-load cycles of the
next input's first conv layer. That conv layer can then start streaming at
once, so the classifier's rows cost no extra time. The testbench runs this
schedule as well and checks its cycle count.

Sizing examples, with input lengths taken from the usual public
pre-processing of these data sets rather than from the source:

- **Arrhythmia model** (187-sample beats, 16 and 32 filters, 5 classes): a
  whole layer's output positions fit one pass of the 256-row banks.
- **Apnea model** (6000-sample minutes, 32 and 64 filters, 2 classes): the
  output positions must be processed in blocks of at most 256, read out
  between blocks.

Filter tiles alone call for 1 array (16 filters), 2 arrays (32) and 4 arrays
(64). That is consistent with the array counts the source reports for these
layers; it uses more arrays where it also splits the reduction.

## What is not here

- **The BP quantizer.** This is the mapping from numbers to BP codes, and the
  re-encoding of layer outputs into BP9 for the next layer, including the
  HardTanh activation. The source does both in its software flow and does not
  give the code books. Results leave this RTL as binary sums.
- **A sequencer.** The source describes none. The host drives every cycle;
  the testbenches show complete command sequences.
- **The physical design.** Supply voltage, clock frequency and the 22 nm
  implementation leave the logic untouched.
- **Reported latencies.** The source's per-layer latency and energy figures
  depend on layer sizes it does not give, so they are not reproduced.

## Files

| file | content |
|------|---------|
| `rtl/bendi_pkg.sv` | BP9 type, command enum, default sizes, reference product function |
| `rtl/full_adder.sv`, `rtl/half_adder.sv` | one-bit adders |
| `rtl/parallel_counter.sv` | 8-input ones counter |
| `rtl/bpe.sv` | processing element |
| `rtl/bdsa.sv` | 16x16 array with DiP dataflow |
| `rtl/accumulator.sv` | banked accumulation and read-out |
| `rtl/bendi_interface.sv` | host command decode |
| `rtl/bendi_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per block, `tb_bendi_top` end to end at full size, `tb_conv_layers` for whole layers |

Default sizes are in `bendi_pkg`:

| constant | value | source |
|----------|-------|--------|
| `ARRAY_N` | 16 | published |
| `N_ARRAYS` | 4 | published |
| operand | 9 bits | published |
| `PSUM_W` | 16 | published |
| `ACC_W` | 24 | this design's choice |
| `ACC_DEPTH` | 256 | this design's choice |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/bendi_pkg.sv tb/tb_bendi_top.sv --top-module tb_bendi_top
./obj_dir/Vtb_bendi_top
```

Replace the testbench name to run the others. Any tool that reads
SystemVerilog-2017 should work: the RTL uses packages, packed structs,
`always_ff`/`always_comb` and one concurrent assertion.

What the tests establish:

- The ones counter is checked exhaustively.
- The BPE and the accumulator are checked against cycle-accurate models.
- The array is checked against a matrix product on random data, including
  the 17-cycle latency.
- `tb_bendi_top` runs a 48x64 by 64x32 product over all four arrays, using
  the link, accumulation across passes and bank summing. It also checks the
  write and read latencies.
- `tb_conv_layers` checks convolution and fully connected layers against a
  direct convolution. It also checks the overlapped classifier/conv schedule,
  including its cycle count.

The design has not been taken through synthesis timing or power analysis.
