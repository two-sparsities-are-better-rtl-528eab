# Complementary Sparsity datapath in SystemVerilog

A neural network that is sparse in its weights (most weights are zero) and
in its activations (only the k largest outputs of a layer survive a
k-winners-take-all, k-WTA, step) needs only a few percent of the
multiplications of its dense twin. Ordinary hardware gains little from this,
because the surviving weights and activations sit at irregular places.

*Complementary Sparsity* makes the weight side regular. Several sparse
kernels whose non-zero positions do not overlap are packed, offline, into
one dense kernel. Each packed weight keeps a small tag, its **Kernel ID
(KID)**, that says which original kernel it belongs to. A layer then works in
five steps:

1. **Combine**: the packed kernels are stored as an *augmented weight
   tensor*. Row `r` holds, for input position `r`, the `N` (weight, KID)
   pairs of the `N` packed sets.
2. **Select**: a k-WTA keeps the `K` largest input activations and their
   positions.
3. **Multiply**: each winner reads its row and multiplies its value by the
   `N` weights, which gives `K*N` sub-products per cycle.
4. **Route**: each sub-product is steered by its KID to the adder of its
   own kernel.
5. **Sum**: one adder tree per output kernel adds what arrived.

For a 1x1 convolution with 64 inputs and 64 outputs, at `N = 4` and
`K = 8`, a dense layer needs 4096 multiply-adds. This layer needs 32.

This RTL implements those steps as blocks. They are wired into a small
speech-network-like chain (`cs_top`) and a testbench checks that chain end
to end.

## Number formats

All blocks share `cs_pkg`:

| quantity | format |
|---|---|
| activation (`act_t`) | 8-bit unsigned (values after ReLU) |
| weight (`wt_t`) | 8-bit two's complement |
| product (`prod_t`) | 17-bit signed |
| accumulator (`acc_t`) | 24-bit signed; it wraps on overflow and does not saturate |
| requantisation (`requant`) | ReLU, then arithmetic right shift, then saturate to 255 |

The shift amounts between layers are parameters of `cs_top`.

## The weight memory and the Kernel ID (`wt_mem`)

`wt_mem` has `C*W*W` rows, one per (tap, input channel). The default is
576 rows, for a 3x3 kernel over 64 channels. Row address = `tap*C + channel`.

A row holds `N` entries. Entry `j` is `{kid[KID_W-1:0], weight[7:0]}`, found
at bit `j*(8+KID_W)`. With `N=4` and `KID_W=6` a row is 56 bits.

The memory has `K` read ports, one per winner. Each port returns a whole row
one cycle after its address (a synchronous read). In an FPGA the weights
would be spread across dual-ported block RAMs to get `K` ports. Here they
are one array with `K` read ports, and the mapping onto RAM macros is left
to the implementation tools.

**Rule the weights must follow.** Within a row, the `N` KIDs come from `N`
different packed sets. A kernel has at most one weight per input position,
so no KID appears twice in a row. Everything downstream relies on this.

## Routing: arbiter and adder trees (`kid_arbiter`, `atree_router`)

This is the hardest part of the design.

With `K` winners in flight, two sub-products of the same cycle can carry the
same KID: two winners whose rows both hold a weight of kernel 17, say. Each
kernel therefore has an adder tree with `SLOTS` inputs, and the design must
give every sub-product its own input.

**Slot assignment.** `kid_arbiter` numbers the `M = K*N` sub-products `0..M-1`
in a fixed order (port-major). It gives sub-product `j` the slot

    slot[j] = number of valid i < j with kid[i] == kid[j]

This is a prefix count: the first occurrence of a KID gets slot 0, the
second gets slot 1, and so on. It is purely combinational: `M*(M-1)/2` KID
comparators feed one small counter per sub-product.

`overflow` is raised if any count reaches `2^SLOT_W`. `ss_conv` makes that
flag sticky as `slot_overflow`.

With `SLOTS = N` the overflow cannot happen if each kernel has at most `N`
non-zero weights per tap. The test weights are built that way.

**Routing and sums.** `atree_router` writes each sub-product into the
`(kid, slot)` input of a `F x SLOTS` array. All other inputs are zero. An
assertion warns if two sub-products ever claim the same input. Each of the
`F` kernels then reduces its `SLOTS` inputs with a balanced adder tree; an
odd count is handled by passing the last input through to the next level.
A sub-product whose KID or slot is out of range is dropped.

## Convolution blocks

### `ss_conv`: sparse-sparse convolution

This block handles 1x1 and 3x3 kernels, C=64 to F=64. A 3x3 kernel is done
as 9 one-by-one steps, one tap per cycle. The `K` winners of the tap enter
with `in_tap`, `in_first` and `in_last`.

| cycle | what happens |
|---|---|
| t | the `K` row addresses go to `wt_mem` |
| t+1 | multiply, arbitrate, route, sum, then add into the running per-kernel sum; `in_first` restarts that sum |
| t+2 | `out_valid` rises for the step that carried `in_last` |

A 3x3 location therefore takes 9 cycles plus 2 cycles of latency. A 1x1
location takes one cycle, with `in_first` and `in_last` both high.

### `sd_conv`: sparse-dense stem

The first layer sees a dense image, so only weight sparsity can be used. The
stem is a 7x7x3 convolution with 64 kernels and 5 non-zero blocks per kernel.
The 3 colour channels of a position form one block, which is either all
zero or all non-zero.

The 64 kernels are packed spatially into `SETS = 8` complementary sets of 49
positions. Each entry holds 3 weights and one KID:
`{vld, slot, kid, w2, w1, w0}`, 34 bits.

The input is dense, so every entry is used every cycle and the adder-tree
slots never change. They are therefore computed offline and stored in the
entry, and this block needs no arbiter. One patch enters per cycle and 64
sums come out one cycle later.

## Linear layer with accumulator routing (`ss_serial_accum`)

The 1600 to 1500 fully connected layer takes one non-zero activation per
cycle. Its input index selects a row of 75 (weight, KID) pairs. 75 pairs per
row means 5% of the weights are non-zero.

All 75 products are added in the same cycle into the accumulators named by
their KIDs. The KIDs of a row are distinct, which is asserted, so the
updates never collide.

`start` clears the 1500 accumulators. The accumulator vector is an output
port.

## k-winners-take-all

### Local k-WTA over 64 channels (`kwta_local`)

This k-WTA is built from three helper modules:

- `sort8`: Batcher's odd-even merge sort on 8 inputs. It has 19
  compare-exchange elements in 6 levels, and sorts (value, index) pairs
  largest first.
- `topk_fifo`: 8 entries of 14 bits.
- `max8_tree`: a 3-level tree that finds the largest head among 8 FIFOs.

The 64 channel values are split into 8 sub-vectors of 8. Each sub-vector is
sorted and placed in its own FIFO. The block then makes `K` selection
passes. In each pass, `max8_tree` picks the largest FIFO head, and that FIFO
is popped.

The block has two load modes:

| mode | how the vector is loaded | cycles per vector |
|---|---|---|
| `PARALLEL_LOAD=0` | one sub-vector per cycle, steered to FIFO `in_burst` by a single sorter | `8 + K` (16 at `K=8`), plus output |
| `PARALLEL_LOAD=1` | 8 sorters load all FIFOs in one cycle | `1 + K` |

Equal values go to the lower channel index, both in the sorters and in the
max tree. The outputs are `K` values with their channel indices, largest
first. A new vector may start only after `out_valid`.

### Global k-WTA by histogram (`kwta_global`)

This block keeps the 225 largest of 1500 values without sorting them. The
values sit in AMem as 300 blocks of 5. Each of the 5 lanes has its own
256-bin histogram with 12-bit bins, so the 5 increments of one cycle never
collide.

The block runs in phases:

| phase | cycles | what it does |
|---|---|---|
| HIST | 300 | reads every block and counts each value in its lane's histogram |
| FIND | one per bin | adds the 5 counts of each bin, from bin 255 down, until the running total reaches K; that bin is the threshold |
| APPLY | 300 | reads AMem again and outputs each block with values below the threshold zeroed; the histograms are cleared in the same pass |

Values *equal* to the threshold pass. When the threshold bin holds several
values, more than K can therefore survive.

After reset, the histograms take 256 cycles to clear. `k_sel` chooses K at
run time; 0 means the parameter default of 225.

## Pooling (`maxpool`)

`maxpool` takes the channel-wise maximum over a window of vectors, one vector
per cycle. `in_first` and `in_last` frame the window, and the result appears
one cycle after `in_last`. It is used for 2x2 pooling, a window of four
vectors.

## The assembled chain (`cs_top`)

`cs_top` runs one frame through the following chain. LOCS = 25 pooled
locations by default.

    dense 7x7x3 patch --sd_conv--> requant --kwta_local (serial)--> 8 winners
        x9 taps --ss_conv 3x3--> requant   (x4 conv locations)
        --maxpool 2x2--> kwta_local (parallel) --> 8 winners
        --ss_serial_accum (index = location*64 + channel, zero winners skipped)
        ... after 25 locations: requant 1500 sums --> AMem --kwta_global K=225

A frame needs `25 * 4 * 9 = 900` patches, one per `patch_ready` handshake.
Before the first frame, load the three weight memories through the
`sd_wr_*`, `cv_wr_*` and `li_wr_*` ports.

The results leave 5 per cycle on `out_valid`, `out_addr` and `out_val`, with
the threshold on `thresh`. `done` pulses at the end of the frame.

One state machine sequences everything, and stages do not overlap. A frame
takes about 19,600 cycles, most of them spent on the 900 stem patches and
their k-WTA.

The sizes follow a keyword-spotting network: 64 channels, a 5x5x64 map
flattened to 1600, a 1500-wide hidden layer at 85% activation sparsity, and
a 12-way output. The layer mix is this design's own. It uses the ResNet
style 7x7x3 stem and a 3x3 layer in place of that network's two 5x5
convolutions, and it leaves out the final 1500 to 12 output layer.

## Where this departs from the published design

- **Timing is not the published one.** The published k-WTA target is one
  cycle per vector. This one needs `8+K` or `1+K` cycles. Layers do not run
  as a pipeline.
- **Filled in where the paper is silent:**
  - the bit widths and requantisation;
  - KID width = log2(kernels);
  - the slot order of the arbiter;
  - tie breaking;
  - the 8 sets of the stem;
  - N = 75 for the linear layer;
  - all handshakes and the load ports.
- **Published figure typo.** The histogram search loop in the published
  figure is printed with an impossible end condition. It is read here as a
  loop from 255 down to 0.
- **Threshold compare.** The published prose keeps values *above* the
  threshold, while its figure keeps values *greater than or equal*. The
  figure is followed.
- **Parallel-load k-WTA.** Its figure is not available. It is built from its
  description: one sorter per sub-vector, and all FIFOs loaded at once.
- **Accumulator overflow.** Accumulators are 24 bits and wrap. Weight scales
  must keep sums in range, as the testbenches do.
- **Not built:**
  - the 5x5 convolutions of the keyword network;
  - its 12-way output layer;
  - the FPGA platform, host and vendor RAM macros.

## Testbenches and simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares against a model written independently inside the testbench. Each
one checks latencies in cycles, has a watchdog, and ends with a line
`TB_RESULT checks=N failures=M`.

`tb_cs_top` uses the default sizes. It loads all weights and runs two full
frames:

- one at K = 225;
- one with K chosen so that the threshold bin is shared (a tie).

It compares the 1500 linear sums and all 300 output blocks against a
reference model of the whole chain. It also checks that the frame latency
does not depend on the data, apart from the threshold search.

It fails if any of these mechanisms never happened:

- serial burst loads;
- parallel loads;
- arbiter slots above 0;
- zero winners skipped;
- pooling;
- a tie at the global threshold.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_cs_top \
        rtl/cs_pkg.sv $(ls rtl/*.sv | grep -v cs_pkg) tb/tb_cs_top.sv
    ./obj_dir/Vtb_cs_top +verilator+rand+reset+2

The package must come first. `-Wno-fatal` keeps lint warnings, such as the
unused inputs of the inactive `kwta_local` load mode, from stopping the
build. The full-size top test runs in a few seconds once built.

Weight layouts used by the tests:

- 3x3 layer in `tb_cs_top`: `kid = ((ch/4 + 3*tap) mod 16) + 16*j` for
  entry `j`. Groups of 4 neighbouring channels share kernels, so slot
  collisions are frequent.
- Linear layer: `kid = 20*j + (7*row + j) mod 20`.
