# A precision-scalable, sparsity-guarded ConvNet processor in SystemVerilog

Convolutional layers spend nearly all their energy on multiply-accumulates and
on the memory fetches that feed them. Two properties of real networks make much
of that work avoidable. First, layers rarely need full 16-bit words: depending
on the network and the layer, 1 to 9 bits per weight or pixel keep the accuracy
loss below 1%. Second, after ReLU, and more so at low precision, a large share
of the words is exactly zero: up to about 90% of the pixels in some AlexNet
layers.

This processor turns both properties into energy savings while keeping its
throughput:

* **A 16x16 "2-D SIMD" MAC array with shifted inputs.** Each cycle, 16 weights
  (one from each of 16 filters) and 16 pixels (16 neighbouring output
  positions) produce 256 products. Pixels enter through a shift register, so
  most cycles need only one new pixel.
* **Per-layer precision.** Each operand path rounds its words to a programmable
  width of 1 to 16 bits. The dropped low bits are forced to zero, which stops
  them from toggling. On silicon this also shortens the critical path, so the
  array can run from a lower supply voltage.
* **Guarding.** Every data word has a 1-bit "nonzero" flag stored in a
  separate guard memory. A zero operand is not fetched from its SRAM bank, and
  the MACs it would feed are not clocked.
* **A two-symbol Huffman code on the IO stream.** A zero word costs 1 bit and
  any other word costs 17 bits.

The RTL here covers all of the chip's digital datapath, memories and data
movement. It does not cover the instruction-set controller, which is driven
from outside through a per-cycle control word.

## Block overview

```
            IO stream (16-bit chunks, optionally Huffman coded)
                 |
        +--------+--------+      +---------------------+
        | dma              |----->| prog_mem  16 kB     |--> fetch port (controller)
        |  huff_dec/enc    |      +---------------------+
        +--+-----------+---+
           | port D    | flag writes
   +-------v-------+  +v-------------------+
   | data_mem      |  | guard_mem  4 kB    |
   | 4 blocks x 16 |  | image | filter     |
   | banks x 2 kB  |  +---+-------+--------+
   +--+--------+---+      |flags  |flags
      |port A  |port B    |       |
      v        v          v       v
  image_fifo  precision_guard  (round to n bits, zero-gate by flag)
      | 16 pixels   | 16 weights
      +-----> mac_array 16x16, 48-bit accumulators
                    | one accumulator row
               vector_unit (16 lanes: requantise, ReLU, max-pool, ...)
                    | write-back (port B) + flags (image guard memory)
```

| File | Function |
|---|---|
| `cnn_pkg.sv` | Shared widths, the vector, request, DMA descriptor and control-word types, and the rounding function |
| `sram_sp.sv` | A 1024 x 16 single-port SRAM macro (2 kB) |
| `round_unit.sv` | Rounds a word to b bits |
| `precision_guard.sv` | Filter operand registers: guarded load, rounding, zero-gating |
| `image_fifo.sv` | Image shift register: parallel load or one-pixel shift, with flags |
| `mac_unit.sv`, `mac_array.sv` | One guarded 16x16-bit MAC with a 48-bit accumulator, and the 16x16 array of them |
| `data_mem.sv` | The 128 kB data memory (64 macros) with three ports |
| `guard_mem.sv` | The image and filter flag memories (2 x 2 kB) |
| `prog_mem.sv` | The 16 kB program memory |
| `vector_unit.sv` | The 16-lane 1-D SIMD unit |
| `huff_enc.sv`, `huff_dec.sv` | The Huffman coder and decoder |
| `dma.sv` | The DMA engine |
| `cnn_processor.sv` | The top level |

## How a convolution maps onto the array

This is the heart of the design, and the part most worth understanding.

The array computes 16 output positions of one output row for 16 filters at
once. Row `r` of the array belongs to filter `f0+r`; column `c` belongs to
output position `x0+c`. MAC `(r,c)` accumulates `w[f0+r][ky][kx] *
img[y+ky][x0+c+kx]` over all taps, and over all input channels if there are
several. The partial sums stay in the 48-bit accumulators until the output row
is finished.

For one kernel row `ky` of a K-wide kernel:

| cycle | image side (port A) | filter side (port B) |
|---|---|---|
| 1 | vector fetch of pixels `x0 .. x0+15`; parallel load into the shift register | vector of 16 weights `w[f0..f0+15][ky][0]` |
| 2 .. K | single fetch of pixel `x0+15+kx`; shifted in at entry 15 while all entries move one place towards entry 0 | vector of weights for tap `kx` |

So column `c` always holds pixel `x0+c+kx`. A K x K kernel takes K^2 MAC
cycles. Of those cycles, K fetch 16+16 words and the other K^2-K fetch 17
words. A 1-D SIMD array would have to fetch 16 words per MAC instead of
sharing them across 256. For the 11x11 example, one output row of 16 positions
and 16 filters per channel takes 121 cycles.

Multi-channel layers simply keep accumulating: issue the K^2 cycles of the
next channel without `mac_clr`. Only the first MAC cycle of an output tile
sets `mac_clr`, which starts every accumulator afresh with its product.

Horizontal strides above 1 are not built, because the shift register gives
neighbouring positions. A stride-s layer can be run by computing all stride-1
positions and keeping every s-th one.

## Precision scaling

Words are 16-bit two's-complement fixed point, kept MSB-aligned at every
precision. For b bits, `round_word` (in `cnn_pkg`) adds `1 << (15-b)` and clears
the low `16-b` bits. A positive overflow saturates to the largest b-bit value.
Image and filter precisions (`img_bits`, `flt_bits`) are set separately in each
control word. They take effect in the cycle of the MAC they belong to, so the
precision can change from one MAC cycle to the next.

The RTL models what precision scaling does to the values, and it keeps the
unused multiplier inputs constant. The supply-voltage scaling that this
enables is a property of the physical design: a separate power domain for the
array, level shifters, and timing closed for several modes. It has no RTL
here. The published operating points are 1.1 V at 16 bit, 0.9 V at 8 bit and
0.8 V at 4 bit, all at 204 MHz.

## Guarding

A flag is 1 when its word is nonzero. The flag of data word `a` is bit
`a[3:0]` of row `a[13:4]` in the image or the filter guard memory. One guard
row therefore covers one 16-word data vector, and each half of the guard
memory covers one 32 kB data block.

Flags are written in two ways:

* by the DMA when it loads data with `gen_flags` set; and
* by the SIMD write-back when `wb_flags` is set. The new flags go to the image
  guard memory, ready for the next layer.

Before the write-back stores the SIMD output, it rounds the output to the next
layer's precision (`wb_bits`; 0 or 16 keeps full precision). The flags are
taken after this rounding. A result that becomes zero at low precision is
therefore guarded in the next layer, just like a ReLU zero.

A guarded operation then goes through three steps:

1. **Fetch.** The flags of the operands are read one cycle before the data.
   Banks whose flag is 0 are not enabled, and their lanes read as zero. A
   single-pixel fetch of a zero pixel is skipped entirely.
2. **Operand registers.** A zero-flagged filter lane keeps its old register
   value and drives zero into the array. The image shift register carries the
   flags along with the pixels.
3. **MACs.** MAC `(r,c)` is clocked only if the row flag and the column flag
   are both set. The top-level output `mac_active` counts the MACs that worked
   in each cycle.

Flags describe the stored word. Suppose data is loaded through the DMA at a
higher precision than the array later uses. A word that rounds to zero in the
operand stage then still counts as nonzero. It costs energy but gives the
right result.

## Memory organisation

* **Data memory.** 128 kB in 4 blocks of 32 kB. Each block has 16 banks of
  1024 x 16 bit. The address is `{block[1:0], row[9:0], bank[3:0]}`, so 16
  consecutive words form one vector spread over the 16 banks.
  * *Ports.* Three ports work in parallel, each in a different block: A for
    image operands or SIMD input, B for filter operands or write-back, and D
    for the DMA.
  * *Access.* Each access is either a vector (with a per-bank enable mask) or a
    single word.
  * *Arbitration.* A wins over B, and B wins over D. The DMA waits while a
    processor port uses its block. A and B in the same block is a program error
    and is caught by an assertion.
* **Guard memory.** 2 x 1024 x 16 flags (4 kB).
* **Program memory.** 8192 x 16 bit (16 kB). The DMA loads it, and the
  controller fetches from it through the top-level fetch port.

Read data always appears one clock after the access.

## Control word and pipeline timing

The top level (`cnn_processor`) takes one `ctrl_t` word per cycle. It stands
in for the decoded VLIW instruction of the controller. A word can combine
several operations:

* an array operation: image fetch, filter fetch, MAC, and the two precisions;
* a SIMD operation;
* a write-back; and
* a DMA start.

A word issued in cycle t goes through these stages:

| cycle | action |
|---|---|
| t | guard flags read (image row `img_addr[13:4]`, filter row `flt_addr[13:4]`) |
| t+1 | data fetched with the flags as bank enables; write-back of `vu_out` (port B) and of its flags |
| t+2 | image shift register and filter registers load; the SIMD unit samples its source (accumulator row `vu_row`, or the vector at `vu_addr`) |
| t+3 | the array accumulates; the SIMD unit computes. Both results are visible from t+4 |

Consequences for the program that drives the control word:

* MAC words can be issued back to back, one per cycle.
* An accumulator row can be read by the SIMD unit when the `vu_en` word comes
  at least 2 cycles after the last MAC word.
* To write back the result of a SIMD operation issued at t, issue the `wb_en`
  word at t+3 or later.
* A SIMD memory read uses port A and a write-back uses port B. Neither may
  coincide with an image or filter fetch in the same fetch cycle. Assertions
  catch such conflicts.

### SIMD unit

The SIMD unit takes an accumulator row and turns it into 16-bit words: an
arithmetic right shift by `vu_shift`, then saturation. It then applies one
operation between that input and its own output register:

* `LOAD`
* `RELU`
* `MAX` (one max-pool step)
* `ADD` (saturating)
* `MIN`
* `NOP`

Max-pooling over two output rows, for example, is `LOAD` of the first row from
memory followed by `MAX` with the accumulators of the second.

## IO, DMA and the Huffman code

Code: a zero word becomes the bit `0`, and a nonzero word becomes `1` followed
by its 16 bits. Bits are packed MSB first into 16-bit IO chunks. The last
chunk of a transfer is zero-padded and marked `io_out_last`. The decoder knows
the word count of each transfer, so it drops the padding, and it never reads a
chunk that belongs to the next transfer.

A DMA transfer is described by a `dma_cmd_t`:

* the direction;
* the target: data, image guard, filter guard or program memory;
* whether the stream is Huffman coded;
* whether to generate guard flags;
* the start address and the word count.

Data-memory transfers move whole 16-word vectors, so their word count is a
multiple of 16. Only the data memory can be read out. The DMA runs while the
array computes, and it waits whenever a processor port holds its block.

## Where this RTL departs from, or adds to, the chip

* **Not built.** The items below are left out:
  * The controller with its C-programmable VLIW/SIMD instruction set (no
    encoding is published). It is replaced by the `ctrl_t` input.
  * The voltage-scalable power domain, clock-gating cells and pads. Clock
    gating is modelled as register enables.
  * Horizontal strides of 2 to 4.
* **This design's own choices.** The paper leaves these open, so they were
  chosen here:
  * the address map and flag mapping;
  * the pipeline timing;
  * port arbitration;
  * the SIMD operation set beyond ReLU and max-pool, and accumulator
    requantisation;
  * the Huffman bit order and chunking;
  * the DMA descriptor and automatic flag generation;
  * the 16-bit program word;
  * signed arithmetic;
  * rounding with saturation;
  * the split of the 4 kB guard memory into equal image and filter halves.
* **Memory total.** 128 + 16 + 4 = 148 kB. The chip's summary table quotes
  144 kB; the 148 kB total follows the block sizes.

## Workloads

For each workload, the table says whether it fits and how much it needs
against what is built.

| Layer | Precision (filter / image) | Fit |
|---|---|---|
| AlexNet l1 | 7 / 4 bit | input 227x227x3 = 302 kB is more than 128 kB, so it is tiled through the DMA; stride 4 only by computing all stride-1 outputs |
| AlexNet l2 | 7 / 7 bit | 16 filters x 5x5x48 = 19,200 words is more than one 16,384-word block, so channels run in two passes into the same accumulators |
| AlexNet l3-l5 | 8-9 / 8-9 bit | tiled by filter group and channel half; 3x3x256 terms need fewer than 44 bits of the 48-bit accumulator |
| LeNet-5 l1, l2 | 3 / 1, 4 / 6 bit | fits a single block; 6 or 16 filters per pass |

Throughput: 256 MACs at 204 MHz is 52 GMAC/s (102 GOPS) peak. AlexNet's
666 MMAC per frame at 47 fps needs 31 GMAC/s, which is 60% utilisation.

## Simulating

Every module has a self-checking testbench in `tb/` that ends with a line
`TB_RESULT checks=N failures=M`. With plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/cnn_pkg.sv tb/tb_mac_array.sv \
          --top-module tb_mac_array -Mdir obj && ./obj/Vtb_mac_array
```

Replace `tb_mac_array` with any testbench name. `-Wno-fatal` lets the
build go on past the testbenches' width-mismatch lint warnings; they are
harmless there. Uninitialised state is random
in a 2-state simulator, so run with `+verilator+rand+reset+2` to make sure
nothing depends on it.

`tb_cnn_processor` runs the whole processor at its default size, playing the
role of the controller:

1. It loads an image and the 3x3 weights of 16 filters through the
   Huffman-coded stream, with flags generated on the way.
2. It loads and fetches program words.
3. It computes one output row at 16 bit while a second DMA load stalls behind
   the image port.
4. It applies ReLU and writes the row back.
5. It computes a second row at 7 bit and max-pools it with the first.
6. It writes the pooled result back at 6-bit precision with its flags, and
   reads it out coded.

Every result is compared with a reference computed in the testbench. The
testbench checks:

* the 9-cycle MAC sequence per output row;
* the count of active MACs;
* that each mechanism (guarded MACs, skipped pixel fetches, masked filter
  banks, DMA stall, precision switch, coded input and output, ReLU, max-pool,
  flag write-back, rounding to zero at write-back, program fetch) actually
  occurs.

The testbench takes about ten seconds to build and well under a second to run.

`tb_workloads` runs one output-row tile of each layer the chip was measured
on. Each tile uses that layer's kernel size, its filter and image precision,
and its share of zero words. Data is generated at the layer's precision. For
each tile the testbench checks:

* the MAC-cycle count, K x K x C;
* the number of MACs that actually worked;
* every ReLU output;
* the IO compression.

A typical run prints:

| Tile | Bits (filter / image) | Zeros (filter / image) | MAC cycles | MACs that worked | Image IO compression |
|---|---|---|---|---|---|
| LeNet-5 l1, 5x5x1, 6 filters | 3 / 1 | 73% / 84% | 25 | 5% | 4.6x |
| LeNet-5 l2, 5x5x6 | 4 / 6 | 24% / 55% | 150 | 34% | 2.0x |
| AlexNet l1, 11x11x3 (stride 1) | 7 / 4 | 20% / 27% | 363 | 58% | 1.3x |
| AlexNet l2, 5x5x4 of 48 channels | 7 / 7 | 17% / 91% | 100 | 8% | 6.7x |

The filter zero share of the LeNet-5 l1 tile includes the 10 unused array
rows. The compression follows 16 / (z + 17(1-z)) for a zero share z; at
AlexNet l2's 89% this gives the 5.8x that the chip reports for that layer.

To change the design, edit the sizes in `cnn_pkg` or the module parameters.
Lane count, bank count, memory depth and accumulator width are parameters; the
vector and control types follow `cnn_pkg::N`.
