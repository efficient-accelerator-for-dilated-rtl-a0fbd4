# Dilated and transposed convolution on a dense 3x3 engine

Segmentation networks use two convolutions that are mostly zeros.

- A **dilated** convolution with D inserted zeros spreads a 3x3 kernel over a
  (2D+3) x (2D+3) window.
- A **transposed** (stride-2) convolution inserts a zero between neighbouring
  input elements before convolving.

A plain dense engine run on the zero-inserted form wastes most of its
multiplies. This design never builds that form. It decomposes the problem
into ordinary dense 3x3 convolutions:

- **Dilated: split the input.** Take every (D+1)-th row and column, starting
  at phase (p, q). This gives (D+1)^2 small maps. A dense 3x3 convolution
  with one zero of padding on each small map gives exactly the outputs at the
  same phase.
- **Transposed: split the kernel.** Every output element of a zero-inserted
  3x3 convolution meets input data at one of four kernel patterns: the four
  corners (2x2), the left/right pair (1x2), the top/bottom pair (2x1) or the
  centre (1x1). So the kernel is applied directly to the un-enlarged input,
  one pattern per output position.

Both run on the same array of multiply-accumulate (MAC) blocks with no
special datapath. The only additions are one mode bit that cuts one link of
the adder chain, and two accumulator ports.

The RTL is in `rtl/` (SystemVerilog 2017, synthesizable). Self-checking
testbenches are in `tb/`.

## The MAC block (`pe_block`)

One block is an N x 3 grid of PEs (default N = 14). Row i receives element
x[i] of an *input column vector*. PE column k receives weight w[k] of a
*weight column vector*, one column of the 3x3 kernel. Every PE multiplies.
The products are added along the down-right diagonal:

```
          w0          w1            w2
 x[i-2]  [x]---.
 x[i-1]  [x]   '-->[x]+---.
 x[i]    [x]           [x]+ ---> psum_last[i] = x[i-2]w0 + x[i-1]w1 + x[i]w2
```

So the last PE column outputs a 3-tap filter along the input column.
Row i of the block carries output row i-1. The two diagonals that run off the
bottom of the block are output as well:

- `psum_mid[N-1] = x[N-2]w0 + x[N-1]w1`
- `spill1 = x[N-1]w0`

When four blocks are stacked, the sums that leave one block are completed by
the block below.

In **transposed mode** the link from the middle column into the last column
is cut. The block then produces two independent results per row:

- `psum_mid[i] = x[i-1]w0 + x[i]w1`, a 2-tap sum that lands on an odd output row
- `psum_last[i] = x[i]w2`, a single tap that lands on an even output row

The outputs are registered, so a block has one cycle of latency. Four blocks
of 14 x 3 give 168 MACs per cycle.

## Dilated convolution: input decomposition and schedule

Element (r, c) of an H x W input goes to small map (r mod (D+1), c mod (D+1)).
Inside that map it sits at position (r div (D+1), c div (D+1)). The small map
(p, q) has these dimensions:

- SH = ceil((H-p)/(D+1)) rows
- SW = ceil((W-q)/(D+1)) columns

Dense work is the same thing with D = 0.

The small maps of one column phase q are not run one after the other. Their
columns are stacked: input column c is held as one column vector in which
row phase 0 comes first, then one zero lane, then row phase 1, and so on.
Row phase p starts at lane p*(H div (D+1) + 1) + min(p, H mod (D+1)). The
3-tap filter along the column then works on every row phase at once. The
zero lane between two phases provides the padding below one phase and above
the next, so no result leaks from one phase into its neighbour. The vector
is spread over the four stacked blocks (56 lanes). It needs
H + min(D+1, H) - 1 lanes.

Each column vector is sent to the blocks once for each kernel column
a, b, c. The kernel column a, b, c is applied as weight column k = 0, 1, 2:

- Input column c with kernel column k contributes to output column
  c + (1-k)(D+1).
- On the first column of a small map, kernel column c would only meet
  the zero padding, so it is skipped. On the last column, kernel column a
  is skipped the same way. A one-column map needs only b.

So a column phase costs `3*SW - 2` cycles (1 if SW = 1), and a layer costs
the sum over the D+1 column phases. Some examples, all checked by the
testbenches:

| map | D | cycles |
|---|---|---|
| 7x7 | 1 | 17 |
| 7x7 | 2 | 15 |
| 56x32 | 0 | 94 |
| 53x32 | 3 | 88 |
| 41x32 | 15 | 64 |

Rows are padded with zeros instead of being skipped: every row phase has a
zero row above and below it. That is why large D loses efficiency. The
D zero lanes take room in the 56-lane vector, so at D = 15 a tile holds at
most 41 rows.

## Transposed convolution: kernel decomposition and schedule

Let the output be (2H-1) x (2W-1). Number the kernel as rows 1..3 and
columns a, b, c, so that `wa2` is row 2 of column a. Output column 2j+1
(odd) needs input columns j and j+1. Output column 2j (even) needs input
column j alone. Three blocks are used per cycle:

| block | input column | weights on PE columns 0, 1, 2 | output column |
|---|---|---|---|
| 0 | j | wa1, wa3, wa2 | 2j+1 |
| 1 | j+1 | wc1, wc3, wc2 | 2j+1 |
| 2 | j | wb1, wb3, wb2 | 2j |
| 3 | – | idle | – |

With the diagonal cut, PE columns 0-1 form the corner or vertical part, and
PE column 2 forms the horizontal or centre part. Each block produces the 2N+1
output rows that its N input rows touch. Input rows are processed N = 14 at a
time (a row tile). The last input column has no odd partner, so blocks 0 and
1 idle there.

A layer takes `ceil(H/14) * W` cycles. For example:

- A 3x3 input takes 3 cycles.
- A 56x32 input takes 128 cycles and yields a 111x63 output.

## Where results go: buffers and stitching

- **`input_decomposer` / `input_buffer`**: one 56-lane word holds one
  column vector.
  - The decomposer writes element (r, c) to word c, lane
    `offset(r mod (D+1)) + r div (D+1)`, with the phase offset given above.
    Row phase and lane are counters; the offsets need one division per run.
  - The controller walks columns q, q+(D+1), ... .
  - The buffer has two registered read ports, because the transposed
    mapping reads columns j and j+1 in the same cycle.
  - A lane mask from the controller makes every lane that holds no data
    read as zero. This provides the padding between and below the row
    phases.
- **`weight_router`** holds the 3x3 kernel. Each cycle it drives either the
  same kernel column into every block, or the three decomposed groups above.
- **`conv_controller`** is the loop nest described in the two previous
  sections. It issues one column per cycle and never stalls.
- **`psum_align`** places every block output on its output row and adds the
  outputs that share a row.
  - Dense mode: block b holds rows 14b..14b+13.
  - Transposed mode: row 28t + relative row, where t is the row tile.
  - Rows outside the output row mask (the padding lanes) are dropped.
- **`accumulator`** is the output memory. Each word is one output column of
  112 accumulators of 40 bits.
  - Two update ports each add a whole column vector per cycle, with the
    read-modify-write done in the same cycle.
  - The accumulator uses the same word/lane layout as the input buffer
    (for dilated work the lanes hold the stacked row phases). So
    a result is written directly to the address of its final position, and
    the small maps are stitched back together as a side effect.
  - `acc_clear` zeroes the memory. Leaving it low adds a run onto the
    previous result. This is how several input channels are summed.
- **`output_stitcher`** reads the output back in raster order. It undoes the
  row phase with the same counters as the decomposer.

## Pipeline and interface (`dtconv_top`)

```
cycle t    controller: input word(s), kernel column, target output word(s)
cycle t+1  input buffer data and routed weights reach the PE blocks
cycle t+2  PE outputs -> psum_align -> added into the accumulator
```

`conv_done` pulses after the last add. `conv_cycles` reports the number of
issue cycles. A run is driven as follows:

1. Load the kernel. Write nine values with `w_we`, `w_idx` = 3*row + column
   (row-major: wa1 wb1 wc1 wa2 ...), `w_data`.
2. Set `cfg_mode` (`MODE_DILATED`, where D = 0 means dense, or
   `MODE_TRANSPOSED`), `cfg_dil`, `cfg_h` (at most 56, and
   H + min(D+1, H) - 1 at most 56 for dilated work) and `cfg_w` (at most
   32). Pulse `in_start`, then stream H*W elements in raster order on
   `in_valid`/`in_data`. `in_done` pulses after the last element.
3. Pulse `acc_clear` if needed, then pulse `conv_start` and wait for
   `conv_done`.
4. Pulse `out_start`. The output streams on `out_valid`/`out_data`, with
   `out_last` on the final element. The output is H x W for dilated/dense
   and (2H-1) x (2W-1) for transposed. There is no back-pressure on any
   stream.

Data and weights are signed 16-bit. Products and sums stay at full
precision (34 bits inside a block, 40 bits in the accumulator). No
rescaling to 16 bits is done.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `DW` | 16 | data/weight width (the published precision) |
| `N` | 14 | rows per PE block |
| `NBLK` | 4 | PE blocks; at least 3 for transposed mode |
| `ACC_W` | 40 | accumulator width |
| `MAX_W` | 32 | widest input tile |
| `DMAX` | 15 | largest D (ENet's dilation rates 2, 4, 8, 16 are D = 1, 3, 7, 15) |

The tile height is N*NBLK = 56. N and NBLK are a choice. Only their product
of 168 MACs per cycle is derived from the published peak throughput
(168 GOPS at 500 MHz, counting one MAC as two operations). `MAX_W` and the
memory sizes are this design's own. The published chip has 191 KB of SRAM
with no split given. The buffers here are register arrays of 64 words: 7 KB
of input words and 35 KB of accumulators at the defaults.

## How this relates to the published description

These parts follow the published design:

- the PE block structure;
- input decomposition for dilated convolution, with one vector per input
  column that carries all its row phases;
- kernel decomposition for transposed convolution and its block assignment;
- boundary skipping;
- accumulation at the target address.

These parts are this design's own: the host interface, the buffer
organisation and sizes, the pipeline, the row tiling, and the use of the
blocks in dense mode (stacked vertically). Points to be aware of:

- **Cut diagonal.** The published transposed mapping places independent
  results in the third PE column. That only works if the diagonal from the
  middle column into the last one is disabled, and if the middle-column sums
  reach the accumulator. Both are added here: a mode bit per row and N extra
  outputs per block. The published text claims no extra logic is needed.
- **Kernel orientation.** The transposed example pairs the left kernel
  column with the left input (cross-correlation), and this design uses that
  convention everywhere. The published dilated schedule figure labels the
  first column with the right-hand pair of weight vectors. Under this
  convention, the first column here uses the left-hand pair (a, b). The
  number of vectors per column is the same.
- **Fourth block.** With four blocks the fourth one idles in transposed
  mode. The published example has three blocks.
- **One kernel per run.** Only one 3x3 kernel is applied per run: one input
  channel into one output channel. Channels are summed by repeated runs.
  Splitting larger maps into 56x32 tiles (with halos) is left to the host.
  Other kernel sizes, pooling and activations are not covered.
- **Memories.** They are register arrays. In silicon they would be SRAM
  macros.

## Verification and simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M`:

- **`tb_pe_block`**: random operands in both modes, against the
  diagonal-sum equations, with the one-cycle latency checked.
- **`tb_psum_align`**: random partial sums against an independent row
  scatter.
- **`tb_input_decomposer`** and **`tb_output_stitcher`**: the word and lane
  of every element for D = 0, 1, 2, 3, 7 and 15.
- **`tb_input_buffer`**: read data, latency, the lane mask and disabled
  ports.
- **`tb_weight_router`**: weights per block in both modes.
- **`tb_conv_controller`**: every issue cycle against an independently
  listed schedule, plus cycle counts.
- **`tb_accumulator`**: random two-port updates, including both ports on
  the same word, and the clear.
- **`tb_dtconv_top`**: the whole engine at default parameters, compared
  element by element with a direct software convolution. It runs:
  - the 7x7 D = 1 and D = 2 examples and the 3x3 transposed example (which
    must take 3 cycles);
  - dense maps, including a one-column map and two runs accumulated
    without a clear;
  - D = 3, 7 and 15, with the row phases stacked;
  - transposed maps over several row tiles;
  - full 56x32 tiles.

  It checks every run's cycle count against the formulas above. It also
  counts that each mechanism occurred: boundary skips, idle blocks,
  multiple row tiles, accumulation and stacked row phases.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/dtc_pkg.sv tb/tb_dtconv_top.sv --top-module tb_dtconv_top -o sim
./obj_dir/sim
```

Every testbench finishes in under a second.

What is not verified:

- timing closure at any clock rate;
- area and power;
- behaviour with configurations outside the limits above (assertions in
  `conv_controller` flag D > DMAX and maps that do not fit, including too
  many stacked rows).
