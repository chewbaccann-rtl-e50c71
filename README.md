# A binary CNN accelerator after ChewBaccaNN

This is synthesizable SystemVerilog for a binary-neural-network (BNN) inference core. It follows the
architecture of *ChewBaccaNN: A Flexible 223 TOPS/W BNN Accelerator*. Activations and weights are
single bits (+1 is stored as 1, -1 as 0). A product is an `xnor` and a sum of products is a popcount.
A layer's batch normalisation and sign activation collapse into one integer threshold per output
channel.

The core has these parts:
- a 7 x 7 array of XNOR/popcount units;
- a two-block feature map memory (FMM) that swaps source and sink after every layer;
- a double-buffered parameter buffer (PB);
- seven row banks, reached by the array through a rotating crossbar;
- a DMA;
- a scheduler that runs the layer loop nest;
- a near-memory compute unit (NMCU) that accumulates, adds residuals, average-pools, binarizes and
  packs the results as it writes them back.

A host loads the memories and starts the core through a simple word-addressed bus.

```
             host bus
                |
            +---v----+  start/desc/src     +-----------+
            | io_ctrl|-------------------->| scheduler |---- descriptors, thresholds
            +---+----+                     +--+--+--+--+        (PB core port)
     FMM / PB   |                    DMA cmds |  |  | NMCU commands (delayed)
     host port  |                  +----------+  |  +------------------+
                |                  v             | xb_sel, CSR strobes |
  +-------------v-----+  source  +-----+  rows   |                     v
  | mem_interconnect  |--------->| dma |---->+---v-------+         +------+
  |  FMM blk0 | blk1  |<---------+-----+     | row_banks |         | nmcu |
  |  (73 banks each)  |  sink                +-----+-----+         +--+---+
  +--------^----------+                            | 7 words          |  ^
           |                                  +----v----+             |  |
           |                                  | crossbar|             |  | sum / pool
           |                                  +----+----+             |  |
           |                                       | 7 img + 7 wgt    |  |
           |                                  +----v-------------+    |  |
           |  read-add-write, packed results  |  bpu_array (7x7) |----+--+
           +----------------------------------+------------------+
```

## The compute datapath

**xnor_sum** (`rtl/xnor_sum.sv`) takes one 16-channel activation word and one 16-channel weight
word. It counts the channels where they agree: `popcount(~(img ^ wgt))`, a value from 0 to 16 in
6 bits. A lane enable forces the count to 0. This is how taps that fall outside the image or outside
the kernel are switched off. Next to the count it outputs the inverted activation for the pooling
tree.

**csr** (`rtl/csr.sv`) is a 7-position shift register of 16-bit words. A valid bit travels with each
word; a word shifted in from beyond the image border carries valid = 0.

**bpu** (`rtl/bpu.sv`) holds one image CSR and one weight CSR and seven xnor_sum lanes. Lane j pairs
image position j with weight position j. A second-stage adder tree sums the seven counts into an
8-bit 1D inner product, and a registered AND tree runs beside it. Lane j is enabled when it belongs
to the kernel (`tap_mask[j]`) and its image word is valid.

**bpu_array** (`rtl/bpu_array.sv`) has seven BPUs, one per kernel row. A third-stage adder tree adds
the BPU sums of the enabled rows (`row_en`) into a 10-bit 2D inner product (at most 7·7·16 = 784).
For pooling, the AND tree over the inverted activations gives the channel-wise OR, i.e. the binary
max, of every tap in the window. One result leaves the array per cycle. The latency from a CSR shift
to the result is `ARR_LAT = 3` cycles: the CSR, the BPU register and the array register. The `emit`
strobe travels through the same pipeline and raises `valid` together with the result.

### How a convolution is streamed

This is the centre of the design. Everything else exists to keep the array fed in this way.

Take a layer with an odd k_w x k_h kernel (up to 7 x 7), stride 1, and an output the size of the
input (i_h x i_w). The input has n_ci chunks of 16 channels and the output n_co tiles of 16 channels.
The scheduler (`rtl/scheduler.sv`) runs the loop nest of the paper's layer schedule:

```
for n_o  (output tile)      load 16 thresholds into the NMCU
  for n_i (input chunk)     DMA kernel row kr of the tile's 16 filters into row bank kr+3-k_h/2
    for n_r (output row)    DMA the input rows not yet buffered into bank (row mod 7)
      for b_o (16 filters)  shift filter b_o's k_w weights (+ filler) into every BPU's weight CSR
        stream i_w+3 pixels of row n_r+r-3 through BPU r, one per cycle
        -> from the 4th cycle on, one output column per cycle -> NMCU accumulate
  (residual add), binarize and pack the tile
```

The scheme has these parts:

- **Kernel centre at position 3.** The kernel window is centred on CSR position 3 and on BPU 3.
  - BPU r works on image row n_r + r - 3.
  - Lane j works on column n_c + 3 - j.
  - A 3 x 3 kernel uses BPUs 2..4 and lanes 2..4; a 1 x 1 kernel uses only BPU 3, lane 3.
  - Rows above or below the image clear `row_en`. Columns left of the image come from the cleared
    CSR (valid = 0). Columns right of the image are shifted in with `img_valid = 0`. Padding
    therefore contributes nothing to the popcount, rather than a fixed ±1.
- **Weight loading.** Each filter's k_w weights are read from the weight region of the row banks and
  shifted into all seven weight CSRs at once. Each BPU takes the word of its own row bank. After them
  come 3 - k_w/2 filler shifts, so that weight kc lands on position 3 + k_w/2 - kc, which matches the
  image position of column n_c + kc - k_w/2. The weights then stay in the BPUs for a whole row stream.
- **Row bank rotation.** Input row y is always written to bank y mod 7, at word 0. As the window moves
  down one row, the only new row overwrites the bank of the row that dropped out. The crossbar
  (`rtl/crossbar.sv`) rotates instead: BPU r takes bank (n_r + r - 3) mod 7 for its image word, and
  bank r for its weight word. Weight row kr sits in bank kr + 3 - k_h/2, starting at word 128.
- **Packing.** An FMM or row bank word is 32 bits and holds two 16-channel items: pixel x sits in half
  x mod 2. The crossbar's `half` select picks one.
- **Pipeline alignment.** Row bank reads take one cycle, so every control strobe that goes with the
  data is registered once. The NMCU command for an output column is built together with the read
  that completes it. It then passes a delay line of 1 + ARR_LAT = 4 cycles and meets its array
  result. After each stream the scheduler waits 7 cycles (`DRAIN`) so that the pipeline and the last
  NMCU write are finished before the weights change.

A row stream delivers i_w results on i_w consecutive cycles; the top-level testbench checks this for
every stream. Around each stream come k_w + 3 - k_w/2 cycles of weight loading and 3 + 7 cycles of
fill and drain. For i_w = 32 and a 3 x 3 kernel that is about 32 useful cycles out of 47.

### Pooling

A pooling layer has a k x k window and a stride equal to k (2 to 7).
- The k input rows of an output row go to banks in turn; the crossbar maps them to BPUs 0..k-1.
- Lanes 0..k-1 are enabled and the image CSRs stream the row.
- Every k-th shift emits the OR of the k x k window, as a 16-channel word. The NMCU writes it straight
  to the sink.
- Max pooling runs as its own layer on binary activations. Since binarization is monotonic, max-pooling
  after the threshold is the same as before it when the window shares one threshold. The paper makes
  the same argument.

**Average pooling** cannot be moved behind the threshold, so it belongs to the convolution layer: a
conv descriptor with `avg_s` = s > 1 pools s x s windows of the partial sums during binarization.
For every output pixel and channel the scheduler issues s·s − 1 `AVG` commands, which add partial
sums into a 22-bit window register in the NMCU, and then a `BIN` with `acc_en` set, which compares
partial sum plus window sum with the threshold. The host stores s²·θ as the threshold, because the
mean reaches θ exactly when the window sum reaches s²·θ; no divider is needed. The output map is
i_w/s x i_h/s, in the normal packed format. Binarization then takes s² cycles per channel and output
pixel, the same as one cycle per input pixel and channel.

## Near-memory compute unit

`rtl/nmcu.sv` executes one command per cycle against the sink block. It reads in the cycle it
receives a command and writes in the next cycle, so a read-add-write costs no extra cycle.

| command | effect |
|---|---|
| `ACC_INIT` | `psum[a] = sum` (first input chunk of a run) |
| `ACC` | `psum[a] = psum[a] + sum` |
| `RES_LOAD` | residual register = `mem[r]` |
| `RES_ADD` | `psum[a] = psum[a] + residual` |
| `BIN` | bit = `psum[r] >= thr[ch]`, shifted into a 16-bit pack register; on the 16th channel the packed word is written to half `whalf` of word `a` |
| `POOL` | pooled word written to a half word |
| `AVG` | window sum = (`acc_en` ? window sum : 0) + `psum[r]`; `BIN` with `acc_en` compares `psum[r]` + window sum |

The rules behind these commands:
- Partial sums are 16-bit two's complement, two per 32-bit word. Each command carries the half it
  reads (`rhalf`) and the half it writes (`whalf`); the write uses a half-word strobe, so the other
  partial sum in the word is left alone. 16 bits hold the sum of 41 input chunks of a 7x7 kernel
  (41 x 784) without overflow; there is no saturation.
- Thresholds are 16-bit, held in a 16-entry register file that is loaded per output tile.
- An output bit is 1 (+1) when the sum reaches the threshold. A negative batch-norm scale is folded
  into the weights beforehand.
- A layer with `res_en` adds an integer map read from the sink block to each final partial sum before
  binarization. It is 16-bit and packed like the partial sums: element
  r = `((16·n_o + b)·i_h + y)·i_w + x` of channel b of tile n_o is half r mod 2 of word
  `res_base + r/2`.
  For example, it can be the partial sums that a layer two steps earlier left in the same block.

## Memories

**scm_bank** (`rtl/scm_bank.sv`) is one 256 x 32 bit bank, the standard-cell-memory unit of the
paper.
- Reads are synchronous, with 16-bit half write strobes.
- `pwr` models the bank's power switch. A gated bank reads 0 and ignores writes. When power returns,
  its contents are cleared: they are lost, as in the real memory.

**fmm** (`rtl/fmm.sv`) has two blocks of NBANK = 73 banks, 146 kB in all. Word address bits [15:8]
select the bank. Either block is the source (input feature maps) or the sink (partial sums, residual
maps and outputs). `mem_interconnect` (`rtl/mem_interconnect.sv`) gives the roles:

| core state | source block | sink block |
|---|---|---|
| running | DMA reads | NMCU reads and writes |
| idle | host reads and writes either block | |

The source is selected by `src_sel`, which flips after every layer.

**param_buffer** (`rtl/param_buffer.sv`) has two banks of 448 words. The core reads one bank, the
host loads the other, and a `swap` exchanges them. The next network's weights can therefore be loaded
while the current one runs. A bank holds the weights, thresholds and layer descriptors.

**row_banks** (`rtl/row_banks.sv`) are seven single-bank memories with one write port (from the DMA)
and a shared read address. Words 0..127 hold an image row of up to 256 pixels. Words 128..255 hold the
16 filters' kernel row: item `b·k_w + kc`, two per word.

**dma** (`rtl/dma.sv`) copies `len` words from the FMM source block or from the PB core bank into one
row bank, at one word per cycle; n words take n + 1 cycles.

## Programming model

The host bus (`rtl/io_ctrl.sv`) has `req`, `we`, an 18-bit word `addr` and `wdata`. `rvalid` and
`rdata` arrive one cycle after a read.

| addr[17:16] | region |
|---|---|
| 0, 1 | FMM block 0 / 1, word `addr[15:0]`; only while the core is idle |
| 2 | PB load bank, word `addr[8:0]`; at any time |
| 3 | registers at `addr[7:0]`, listed below |

| register | meaning |
|---|---|
| `0x00` | write: bit 0 start, bit 1 swap PB banks; read: {core PB bank, done (sticky), busy} |
| `0x01` | descriptor base in the PB |
| `0x02` | FMM block that holds the network input |
| `0x10+4b+i` | power enables of FMM block b, banks 32i..32i+31 (reset: all on) |

A layer is five PB words (`layer_cfg_t` in `rtl/chewbacca_pkg.sv`):

| word | fields |
|---|---|
| 0 | `last`, `res_en`, `acc_in`, `no_bin`, `op` (conv/pool), `k_h`, `k_w`, `i_h`, `i_w` |
| 1 | `avg_s` (average pooling window of a conv layer, 0 or 1 for none), `wbase`, `n_co`, `n_ci` (in 16-channel units) |
| 2 | `out_base` (sink) and `in_base` (source) |
| 3 | `res_base` and `psum_base` (sink) |
| 4 | `thr_base` (PB) |

Layers follow one another at `desc_base + 5·layer` until one has `last` set.

Data layout (word addresses, two 16-bit items per word where noted):
- input map: `in_base + (n_i·i_h + y)·ceil(i_w/2) + x/2`, half x mod 2;
- output map: `out_base + (n_o·o_h + y)·ceil(o_w/2) + x/2`, half x mod 2, in the same format, so it is
  the next layer's input;
- partial sums: element p = `(b·i_h + y)·i_w + x` of channel b of the current tile is half p mod 2
  of word `psum_base + p/2`;
- weights: `wbase + ((n_o·n_ci + n_i)·k_h + kr)·8·k_w`, item `b·k_w + kc`;
- thresholds: `thr_base + 16·n_o + b`.

To run a network:
1. Write the input map into one FMM block and the descriptors, weights and thresholds into the PB
   load bank.
2. Swap the PB banks, set DESC and SRC, and write start.
3. Wait for done.
4. Read the result from the block the last layer wrote: the input block if the network has an even
   number of layers, the other block if odd.

### Layers larger than a parameter bank

A PB bank holds 448 words, for example 6 input chunks of a 3 x 3 filter tile (6 x 72 words) or one
chunk of a 7 x 7 tile (392 words). A wider layer is run as a sequence of runs, each with its own
descriptor list, weights and start:
- **Per output tile.** A run with `n_co = 1` computes one 16-channel output tile. The host sets
  `out_base` to that tile's place in the output map and `thr_base` to its thresholds.
- **Per group of input chunks.** Two descriptor bits join the runs of one tile. With `no_bin` set the
  run stops after accumulating and leaves its partial sums in the sink block, without binarizing.
  With `acc_in` set, the first chunk of the next run adds onto those partial sums (`ACC` instead of
  `ACC_INIT`). The last run binarizes as usual.
- The host sets SRC for each run, because a finished layer flips the source block and a `no_bin` run
  also counts as a finished layer.
- The host loads the next run's weights into the PB load bank while the current run computes, and
  swaps the banks in between. The core never waits for weights except at the swap.

## Files

| file | content |
|---|---|
| `rtl/chewbacca_pkg.sv` | sizes, descriptor and NMCU command types |
| `rtl/xnor_sum.sv`, `rtl/csr.sv`, `rtl/bpu.sv`, `rtl/bpu_array.sv` | compute datapath |
| `rtl/scm_bank.sv`, `rtl/fmm.sv`, `rtl/param_buffer.sv`, `rtl/row_banks.sv` | memories |
| `rtl/crossbar.sv`, `rtl/dma.sv`, `rtl/mem_interconnect.sv` | data movement |
| `rtl/scheduler.sv`, `rtl/nmcu.sv`, `rtl/io_ctrl.sv` | control, write-back, host port |
| `rtl/chewbaccann.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_workload_cifar.sv` | CIFAR-size layers run through the host bus, with split runs |

## Verification

Every module has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. Each testbench compares against
a model written independently in the testbench, usually with random stimulus from `$urandom`.

Highlights:
- `tb_bpu_array` checks 1x1 to 7x7 windows, the row mask, pooling and the 3-cycle latency.
- `tb_nmcu` runs command streams against a reference memory.
- `tb_scheduler` runs a convolution with residual and then a pooling layer. It checks every DMA
  command, the threshold loads, the alignment of each NMCU command with its `emit`, the address
  coverage of every command type, the crossbar rotation, the layer swap and the `done` pulse.

`tb_chewbaccann` runs the top level at its default size (73 banks per block) through the host bus.
It runs two networks, the second loaded into the PB while the first runs, and then layer 4 again
with 2x2 average pooling as a third run:

| layer | operation | shape |
|---|---|---|
| 1 | 3x3 conv | 10 x 9, 32 to 32 channels |
| 2 | 2x2 pooling | |
| 3 | 7x7 conv with a residual add | |
| 4 | 1x1 conv | |
| 4' | 1x1 conv with 2x2 average pooling | 5 x 4 to 2 x 2 |

It compares every feature map with a reference convolution in the testbench. It also power-gates a
bank and checks that its contents are lost. It counts each mechanism and fails if any never
happened:
- crossbar rotation;
- multi-chunk accumulation and multiple output tiles;
- residual adds, binarization, max pooling and average pooling;
- all three kernel sizes;
- block swaps, PB swaps and bank gating;
- gap-free streams, at one result per cycle.

`tb_workload_cifar` runs layer shapes of a small CIFAR-10 network at the default size, each through
the host bus and checked against the reference:

| layer | shape | runs |
|---|---|---|
| 3x3 conv | 32 x 32, 64 to 64 channels | 4, one per output tile, weights double-buffered in the PB |
| 2x2 pooling | 32 x 32 to 16 x 16, 64 channels | 1 |
| 1x1 conv | 16 x 16, 64 to 64 channels | 1 |
| 5x5 conv | 16 x 16, 32 to 16 channels | 1 |
| 5x5 conv with 2x2 average pooling | 16 x 16 to 8 x 8, 32 to 16 channels | 1 |
| 3x3 conv | 16 x 16, 128 to 16 channels | 2, split by input chunks (`no_bin`, then `acc_in`) |

Each 32 x 32 run takes 115,564 cycles. The testbench also checks that the `no_bin` run leaves the
output map untouched, that the core is still busy while the next run is loaded, and that every row
stream ran without a gap.

## Where this design departs from the paper, and its limits

- **Partial-sum storage.** The whole i_h x i_w partial-sum map of the 16 channels of a tile is kept
  in the sink block, two per word: 8·i_h·i_w words.
  - A 73-bank block (18,688 words) therefore holds a tile's partial sums for about 2,300 pixels.
  - A 32 x 32 map takes 8,192 words, which leaves room for the outputs of up to 20 tiles
    (320 channels). The paper's 56 x 56 ImageNet ResNet layers (25,088 words) and the 220 x 64
    Freesound tiles do not fit.
  - Keeping only the partial sums of the rows still in flight would remove this limit. It is not
    done here.
- **Stride and pooling.** Convolutions have stride 1 and same-size output. Strided convolutions
  (ResNet downsampling) are not built. Pooling supports only window = stride, so AlexNet's
  overlapping 3x3/2 pooling is not supported.
- **Residual paths.** A residual is a 16-bit integer map in the sink block, 8 words per pixel and
  channel tile, so the residual map of a 32 x 32 x 64 ResNet stage (32,768 words) does not fit. Multi-base networks (ABC-Net, Group-Net)
  would need a scaled sum of several binary branches, which is not built.
- **Network boundaries.** The non-binary first and last layers are not run by this core. Weights
  larger than a PB bank are brought in by the host through split runs (above); nothing in the core
  fetches them from off-chip memory by itself. A large fully connected layer therefore takes hundreds
  of runs.
- **Parameter buffer size.** The paper gives "2 banks (3.5 kB)", while its SCM bank is 1 kB. This
  design follows 3.5 kB: 2 x 448 words, enough for a 7 x 7 x 16 x 16 weight tile (392 words).
- **Row bank size.** The paper gives "1 SCM bank each (3.5 kB in total)". This design uses one 1 kB
  bank per row.
- **Not modelled.** Power switches, body bias, clock gating and the latch-based memory cells. Banks
  are plain arrays; the per-bank power enables are outputs (`fmm_pwr`).
- **Drain time.** The fixed drain after each row stream lowers utilisation on narrow layers.
- **Size limits.** The descriptor allows i_w ≤ 256 (the row bank image region), i_h ≤ 511, and
  n_ci, n_co ≤ 255 chunks/tiles.
- **Lint warnings.** Lint reports a few unused signals: the BPU weight-CSR valid bits, the read
  address held in the NMCU's second stage and the pack register's low bit before a shift. They are
  wiring that the datapath leaves idle, not circuit faults. The reset is also reported as used both
  synchronously and asynchronously; the synchronous use is only the `disable iff` of assertions.

Workload fit at the default sizes:

| workload | fits | reason |
|---|---|---|
| 1x1, 3x3, 5x5, 7x7 kernels at stride 1 | yes | |
| CIFAR-10 VGG-like | yes up to 320 channels at 32 x 32, binary layers only | widths unknown |
| CIFAR-10 ResNet-18 | no | residual map, stride 2 |
| Freesound | no | partial-sum storage |
| ImageNet AlexNet | no | overlapping pooling, FC layers |
| ImageNet ResNet-18 variants | no | 56 x 56 partial sums, stride 2 |
