# A ternary-weight CNN accelerator: 64 tiles of dot64 engines

This is the RTL for an inference accelerator that runs convolution layers with
8-bit activations and ternary weights (-1, 0, +1). Because a ternary weight
only selects a value, its negation or zero, the multiply-accumulate becomes an
add. That makes the design suited to an FPGA's logic fabric (LUTs and adders)
rather than its DSP blocks. Each group of 64 weights carries one 16-bit scaling
factor, alpha, into which batch-norm and scale layers are folded. Activations
travel in dynamic fixed point (DFP): an 8-bit mantissa per value and one 8-bit
exponent shared by a whole layer. After every layer the accelerator picks a new
exponent so that the largest output still fits in 8 bits.

The target network is a residual network (ResNet-50): stacks of 1x1 and 3x3
convolutions whose channel counts are multiples of 64, plus element-wise
additions where two branches meet. The first and last layers (8-bit weights,
pooling, FC, softmax) stay on the host CPU.

## The compute array

```
                      512-bit line (64 pixels x 8 bit)
   IRAM bank k  ─────────────────────────────────────────┐   k = 0..3
                                                          ▼
   tile t (t = 0..63):   BSRAM[ky*K+kx] ─ 64 x 2-bit weights ─┐
                         SSRAM[ky*K+kx] ─ alpha (16 bit)      │ shared by the
                         BBSRAM[bias_addr] ─ bias (32 bit)    │ tile's 4 PEs
                                                              ▼
        PE k:  dot64 ──15b──► x alpha ──31b──► accumulate (+bias | +ORAM) ──32b──► ORAM k
```

* **Tile.** A tile holds the weights, alphas and biases of one output feature
  map (OFM). It has 4 PEs, each working on a different output pixel of that
  OFM. So one beat computes 64 OFMs x 4 pixels x 64 input channels: 16384
  ternary MACs.
* **PE.** A PE chains three stages.
  * `dot64` takes 64 activations and 64 ternary codes and sums them into a
    15-bit value. Codes are `01` = +1, `11` = -1, anything else = 0.
    It has a select stage and six registered adder levels, so its latency
    is 7 cycles.
  * `scale_unit` multiplies that value by alpha, giving 31 bits (1 cycle).
  * `accum_bias` adds the product to a 32-bit running sum.
  * The running sum starts from the bias on the first kernel position of a
    pixel. On a later pass it starts from the partial sum already in the
    ORAM. On the last kernel position the sum is written to the ORAM.
  * A beat reaches the ORAM 9 cycles after it enters the PE.
* **IRAM.** There are four IRAM banks, one per PE position. Each holds up to
  128 input pixels of 64 channels, one 512-bit line per pixel. Every IFM line
  is written to all four banks. PE k of every tile reads its own bank, so the
  four PEs of a tile can read four different pixels in the same cycle.
* **ORAM.** Each PE has its own ORAM of 1028 x 32 bits. Output pixel p of a
  layer lives in the ORAM of PE p mod 4, at address p div 4.

## One layer entry, beat by beat

The host programs a table of layer entries through the register port. The CNN
controller (`cnn_ctrl`) runs the entries in order. Each entry has four phases.

1. **Load.** Four load jobs run in turn:
   * IFM lines into the IRAM;
   * weights into the BSRAMs;
   * alphas into the SSRAMs;
   * biases into the BBSRAMs.

   A job of 0 lines leaves that buffer as it is. The write controllers cut
   each 512-bit line from memory as described below.
2. **Compute.** Output pixels are handled in groups of 4. PE k gets pixel
   4g + k. For each group the controller walks the K x K kernel positions,
   one beat per cycle. A beat gives:
   * PE k the IRAM address `(oy*S + ky)*in_w + ox*S + kx`;
   * every tile the BSRAM/SSRAM address `ky*K + kx`;
   * the ORAM address `g`;
   * the first and last flags.

   PEs whose pixel lies past the end of the layer get no valid. A layer of
   npix pixels takes ceil(npix/4) * K * K beats.
3. **Flush.** The controller waits 12 cycles, until the last beat has left
   the pipelines.
4. **Drain.** This phase runs only on an entry marked `last_pass`. The
   `oram_drain_ctrl` reads the ORAMs twice, one pixel of all 64 tiles per
   cycle:
   * a *max scan*, which gives the largest magnitude M of the layer;
   * a *convert scan*, which turns each pixel into a 512-bit line (64 OFMs x
     8 bits) and hands it to the store unit. The store unit writes line n to
     `ofm_base + 64*n`.

   The convert scan stalls whenever the store FIFO is full. For an
   element-wise entry it also stalls while the next line of the other branch
   has not yet arrived in the element-wise buffer.

   At the end the output exponent is committed to the exponent register
   file, and the next entry starts.

A layer with more than 64 input channels runs as several entries over the same
output pixels, one per block of 64 channels:

* the first entry has `first_pass` set: its sums start from the bias;
* the later entries start from the ORAM partial sums;
* only the last entry has `last_pass` set and drains.

A layer with more than 64 output channels runs as separate groups of entries,
each with its own weights. The host also does all padding and spatial
splitting: an entry sees at most 128 input pixels, and convolution has no
padding.

## Down-conversion and the shared exponent

Take the largest magnitude M of the layer's 32-bit results. The shift is

    rs = max(0, 25 - LZC32(M))

so M keeps 7 magnitude bits plus the sign. LZC32 counts leading zeros in a
32-bit word.

Each value x is converted in three steps:

* it is shifted right arithmetically by rs;
* if both bits just below the kept part (bits rs-1 and rs-2) are 1, the
  result is incremented by 1;
* the result is saturated to [-128, 127].

Saturation can only be reached through the increment. For example, M =
0x3ffff gives rs = 11, which keeps 127, and the increment would carry it to 128.

The exponent of the result is

    e_out = e_act + e_wei + rs

* `e_act` is the exponent of the input activations. It comes from the
  exponent register named by the entry.
* `e_wei` is the weight exponent written in the entry.

## Element-wise layers (residual merge)

At a merge point the host first runs one branch. Its 8-bit output goes to
memory with exponent e1. It then runs the other branch with `eltwise` set and
`elt_base` pointing at the first output. During the drain of that second
branch the load unit streams the first branch's lines into a FIFO (128 x 512
bits). The element-wise unit then:

* shifts the operand with the smaller exponent right by the difference, at
  most 7;
* adds the two;
* saturates the sum to 8 bits.

The output exponent is max(e1, e2). Both branches must have the same number of
pixels.

## Memory side: load/store unit and line layouts

All traffic uses one Avalon-MM master with 512-bit words and byte addresses.

* **Load unit.** It issues reads back to back, with up to 8 outstanding. It
  never issues more reads than the receiving buffer has room for, which
  matters for the element-wise FIFO.
* **Store unit.** It is a 4-entry FIFO.
* **Arbiter.** It holds its grant while `waitrequest` is high and alternates
  priority between load and store after each accepted transfer.

Memory line formats (bit 0 = LSB of the 512-bit word):

| data | line layout | lines per buffer address |
|---|---|---|
| IFM | pixel n = line n; channel c in bits [8c+7:8c] | 1 (to all 4 IRAM banks) |
| weights | 4 tiles per line, 128 bits each; tile 4*(l mod 16)+w in word w; input channel i at bits [2i+1:2i] of the word | 16 (address l div 16 = kernel position) |
| alpha | 32 tiles per line, 16 bits each; tile 32*(l mod 2)+w | 2 |
| bias | 16 tiles per line, 32 bits each; tile 16*(l mod 4)+w | 4 |
| OFM | pixel n = line n; OFM t in bits [8t+7:8t]; tiles >= num_tiles are 0 | - |

The BSRAM, SSRAM and BBSRAM writes go through distribute blocks, which register
the write address and data once for a group of tiles:

* BSRAM: 4 blocks of 16 tiles;
* SSRAM: 2 blocks of 32 tiles;
* BBSRAM: 1 block.

## Host register map

Addresses are 32-bit word addresses on the host port.

| address | meaning |
|---|---|
| 16*i + 0..12 | layer entry i (i < 64), see below |
| 1024 | number of entries to run |
| 1025 | write: start |
| 1026 | read: {busy, layer index} |
| 1056 + j | write: preset exponent register j (j < 16), 8-bit signed |

Entry words:

| word | contents |
|---|---|
| 0 | in_w [7:0], in_h [15:8], out_w [23:16], out_h [31:24] |
| 1 | K [3:0], stride [7:4], num_tiles [14:8], first_pass [16], last_pass [17], eltwise [18], bias_addr [30:24] |
| 2 | act exponent index [3:0], element-wise exponent index [7:4], output exponent index [11:8], weight exponent (signed) [23:16] |
| 3-12 | byte base address and line count of: IFM, weights, alpha, bias; element-wise input base; output base |

`num_tiles` masks out unused tiles: they are left out of the maximum and
written as zero.

## Files

* `rtl/dnn_pkg.sv`: shared widths, the load-channel enum, the decoded
  `layer_cfg_t` struct, and the helpers `tern_mul` and `lzc32`.
* Datapath:
  * `dot64`, `scale_unit`, `accum_bias`, `pe`, `tile`;
  * `max_logic`, `down_convert`, `eltwise_unit`, `exp_unit`.
* Buffers:
  * `sram_1r1w`: every RAM, with a registered read;
  * `elt_fifo`: the element-wise buffer.
* Write side:
  * `iram_write_ctrl`;
  * `distribute_ctrl`: BSRAM, SSRAM and BBSRAM.
* Memory side:
  * `load_unit`, `store_unit`, `avalon_arb`.
* Control:
  * `config_regs`, `cnn_ctrl`, `oram_drain_ctrl`.
* Top:
  * `accel_top`: host port, Avalon master and status.

Each file opens with a description of its interface and timing.

## Simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. For example:

    verilator --binary --timing --assert -Irtl -Itb rtl/dnn_pkg.sv tb/tb_pe.sv --top-module tb_pe
    ./obj_dir/Vtb_pe

`tb/avalon_mem_model.sv` is a behavioural memory with random waitrequest and
read latency. It is used only by the testbenches.

`tb/tb_accel_top.sv` runs the whole accelerator at its default size (64 tiles
x 4 PEs) with a random four-entry program:

* a 3x3 convolution with bias;
* a two-pass 1x1 stride-2 convolution whose second pass adds the first
  result element-wise;
* a 3-pixel layer using 5 tiles.

A behavioural model in the testbench computes every 32-bit sum, the shift,
rounding, saturation, alignment and exponents. Every output byte and the
exponent registers must match exactly. The testbench also counts the
mechanisms and fails if any of them never happened:

* Avalon stalls;
* multiple outstanding reads;
* a full store FIFO;
* drain stalls;
* partial-sum feedback;
* element-wise pops;
* idle PE slots;
* rounding increments;
* saturation;
* exponent alignment.

Building it with verilator takes about 3 minutes; it then runs in under a
second.

## Where this design departs from, or goes beyond, the description it follows

* **IRAM.** The memory table of the original lists 8 IRAM instances of 512 x
  128, while the text gives one IFM bank per PE. This design follows the text:
  4 banks of 128 lines x 512 bits.
* **Partial sums.** The text says partial sums are read back "from memory";
  the block diagram feeds them back from the ORAM. This design keeps them in
  the ORAM.
* **Pipeline depth.** The original quotes a deep pipeline of about 20 stages.
  Here the datapath from IRAM read to ORAM write is 10 cycles. The split of
  the stages is not given.
* **My own choices.** These were not specified:
  * the two-scan drain (max first, then convert);
  * P = 25 and the reading of the round rule as "add 1 when both bits are 1";
  * saturation;
  * the register map and the line layouts;
  * the 16-entry exponent register file;
  * the arbiter policy and 8 outstanding reads.
* **Shared exponent.** The exponent is fixed per drained entry. A layer too
  large for the 128-pixel IRAM must be split spatially by the host, and each
  piece then gets its own exponent, where the original keeps one per layer.
* **Not built.** The host CPU side (first/last layers, programming) and the
  PCIe link with system memory are outside this RTL. They appear as the host
  register port and the Avalon master port.
* **Synthesis size.** Full-size synthesis yields 256 dot64 engines and 256
  ORAMs. Lint and elaboration of the full top are clean. A generic yosys
  synthesis of the full top takes longer than 10 minutes; no FPGA timing was
  measured.
