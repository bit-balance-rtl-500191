# Bit-balance accelerator in SystemVerilog

Most weights of a trained network, written in binary, are mostly zeros. A
bit-serial accelerator that processes one weight bit per cycle wastes most of
its cycles on those zeros. Bit-balance avoids that in two steps:

* **Offline**, every weight is quantized so that it keeps at most
  `N_nzb_max` non-zero bits (NNZB). Only the largest-weight bits are kept, and
  the network is retrained to recover accuracy.
* **In hardware**, each processing element (PE) stores only the non-zero bits
  of its weight: a sign, a one-bit "present" flag per slot (the *bitmap*), and
  the bit position of each slot. It then spends exactly `N_nzb_max` cycles on
  every multiply-accumulate.

Every PE in the array uses the same cycle count, whatever its own weight
holds. So the array stays in lock-step with no load imbalance. That is where
the name comes from. For a signed IFM `x` and a weight `w` with slots `h`, one
PE computes, one slot per cycle:

    psum += bitmap[h] ? (sign ? -x : x) << pos[h] : 0

This RTL is a synthesizable version of that accelerator. It has these parts:

* a 32 x 32 array of sparse bit-serial PEs;
* per-row input and weight buffers, and the decoders that unpack the encoded
  weights;
* per-column post-processing (accumulation, ReLU, requantization, pooling)
  and output buffers;
* a tile controller and a word-level DMA port.

The paper's main configuration is a 32 x 32 array at 1 GHz, with 16-bit and
8-bit precision. The RTL's defaults are those numbers.

## Weight encoding

A quantized weight is stored as:

| field  | width            | meaning                                                |
|--------|------------------|--------------------------------------------------------|
| sign   | 1                | 1 = negative (the magnitude is stored, not 2's complement) |
| bitmap | `N_nzb_max` bits | slot `h` holds a non-zero bit                           |
| pos    | `N_nzb_max` x 4 (16-bit) or x 3 (8-bit) | bit position of slot `h`         |

Slots are filled from the least significant set bit upwards, and unused slots
have bitmap 0. Two examples:

* `-14 = -0b1110` encodes as sign 1 with positions 1, 2, 3.
* `10 = 0b1010` with `N_nzb_max = 3` encodes as bitmap `011` with positions 1, 3.

Quantization itself keeps the `N_nzb_max` most significant set bits of the
magnitude. For example, `0b01101100` with 4 kept bits stays as it is, with
positions 2, 3, 5, 6. Quantization and encoding happen offline. The hardware
has no encoder; the testbench package `tb/bb_tb_pkg.sv` has reference
functions `quantize()` and `encode()`.

### Buffer layout of a weight group

The weights that one array row needs for one kernel position form a *group*:
`N_PE` weights, one per output channel. Each group is stored in 16-bit words,
in this order:

1. `ceil(N_PE/16)` **sign words**: bit `k` is the sign of weight `16i+k`.
2. `N_nzb_max` x `ceil(N_PE/16)` **bitmap words**: slot `h` of 16 weights per
   word.
3. **Position words**, weight-major (all slots of weight 0, then weight 1, and
   so on). Each word holds 4 fields of 4 bits in 16-bit mode, or 5 fields of
   3 bits in 8-bit mode, least significant field first.

The function `group_words()` in `rtl/bb_pkg.sv` gives the group length. With
32 PEs:

| precision | `N_nzb_max` | words per group | bits per weight |
|-----------|-------------|-----------------|-----------------|
| 16-bit    | 3           | 32              | 16              |
| 16-bit    | 4           | 42              | 21              |
| 8-bit     | 4           | 36              | 18              |
| 8-bit     | 5           | 44              | 22              |

The 16-bit figures (16 and 21 bits per weight) match the storage the paper
quotes for 16-bit weights. The field packing (16 signs, 16 bitmap bits, 4 or
5 positions per word) is the paper's. The exact word order is this design's
own choice.

## The PE and its split datapath (`pe`, `complement_unit`, `shift_unit`, `accumulate_unit`)

A PE holds one encoded weight. Each cycle it receives an IFM word and a
*token*. The token is `{valid, h, load_w}`: it says which slot to use and
whether to take a new weight from the row's staging register first.

The datapath has three units:

1. **Complement unit.** It negates the IFM when the sign is set. The IFM is
   inverted, then two 8-bit adders add 1. In 16-bit mode the carry of the low
   adder enters the high adder. In 8-bit mode the high adder gets a constant 1
   instead, so each byte is negated on its own.
2. **Shift unit.** It shifts left by `pos[h]`. In 16-bit mode one 16-bit
   value becomes 32 bits. In 8-bit mode each byte is sign-extended and
   shifted into its own 16-bit lane.
3. **Accumulate unit.** It adds the result to the psum from the PE above,
   using two 16-bit adders. In 8-bit mode the carry between them is cut.

So one PE does one 16 x 16 product per `N_nzb_max` cycles, or two 8 x 8
products sharing the same weight. The PE adds zero, and its IFM inputs stay
at zero, when the token's slot is empty in the bitmap. This is the gating of
empty bits.

The mode bit (`bit_sel` in the paper's drawings) is `MODE8 = 1` here.

One limit: the most negative IFM (-32768, or -128 in an 8-bit lane) negates
to itself. IFMs are pixels or ReLU outputs, so this value does not arise; the
testbenches avoid it.

## Array dataflow (`pe_array`)

The array is weight-stationary:

* **Rows.** Row `r` handles input channel `r` of the current channel tile.
  Each row is fed by its own buffer, delayed by `r` cycles. IFMs and tokens
  move one PE to the right per cycle.
* **Columns.** Column `c` computes output channel `c`. Its psum starts at zero
  in row 0 and moves one PE down per cycle. So the bottom of column `c`
  delivers the sum over all rows of `(+/-IFM_r) << pos_rc[h]`. This happens
  `N_PE + c` cycles after the controller issued that IFM.
* **Tags.** A tag travels beside the tokens. It names the output element, and
  whether this is its first or last slot or its first contribution in the
  tile. It is delayed to leave column `c` together with that column's psum.

Loading a new weight costs no cycles. The token that starts a new kernel
position carries `load_w`, and each PE takes its next weight from the row's
staging register at the moment that token passes it.

## Buffers (`iw_buffer`, `output_buffer`, `sram_sp`, `rf_dp`)

Each array row has one `iw_buffer`:

* two 1K x 16 memories for encoded weights;
* two 256 x 16 memories for IFM patches.

Each pair is a ping-pong: the DMA fills one bank while the array reads the
other. The paper gives these four memory sizes. Which pair holds weights is
this design's choice. A bank holds one input-channel tile: the IFM patch of
one output tile, plus all its weight groups.

Each array column has:

* a post-processing block with a 64-entry dual-port register file for its
  psums;
* an `output_buffer` of two 64 x 16 single-port register files (ping-pong).

With 32 rows and 32 columns these are the memories behind the paper's
176 KB of on-chip storage. The one difference: the psum register file here is
32 bits wide where the paper lists 16. A 16-bit-mode psum is 32 bits.

Memories are plain arrays with a one-cycle synchronous read. A real chip would
use compiled SRAM macros.

## One tile, start to finish (`top_controller`, `weight_decoder`, `post_pro`)

The host runs the outer loops: output tiles, output-channel groups, and the
order in which it reuses data. The hardware runs one output tile of one group
of 32 output channels. That is this loop nest:

    for e < T_IC                    input-channel tiles (one bank each)
     for k < KH*KW                  kernel positions (one weight group)
      for g < tile_h*tile_w         output elements (tile up to 8 x 8)
       for h < N_nzb_max            weight slots
         every PE: psum += (+/-IFM) << pos[h]

The controller has two engines that run side by side:

* **Loader.** It reads the next weight group from every row's weight memory,
  one word per cycle. Each row's `weight_decoder` is told whether the word
  holds signs, bitmaps or positions, and places the fields into the row's
  staging registers. The loader waits `2*N_PE + 2` cycles after the previous
  group's load token entered the array. That token must have passed the last
  PE before the staging registers change.
* **Compute.** It issues one IFM read and one token per cycle. The IFM
  address is `(oy*stride + ky)*patch_w + ox*stride + kx`. When a group's
  tokens are all issued and the next group is not staged yet, it stalls.

A bank is released as soon as its last group has been issued. At the end, the
controller runs these steps in order:

1. It waits for the array to drain.
2. It waits for a free output bank.
3. It starts the post-processing output phase.
4. It marks the output bank full and pulses `done`.

For 3 x 3 kernels, loading a group (32 to 44 words) is much faster than
computing on it (`64 x N_nzb_max` cycles per 8 x 8 tile). So the array is busy
for `T_IC * KH*KW * tile_h*tile_w * N_nzb_max` cycles plus about `2*N_PE`
cycles of fill and drain.

Post-processing has two phases:

* **Accumulate.** It sums the slots of an element in a register. It then adds
  the total to RF entry `g` by read-modify-write, or writes the total directly
  for the element's first contribution in the tile. The same entry is never
  touched in two consecutive cycles, which an assertion checks. So no
  forwarding is needed.
* **Output.** Each entry goes through ReLU, then an arithmetic right shift by
  `out_shift`, then saturation to 16 bits (or 8 bits per lane). With pooling
  on, the maximum of each 2 x 2 window is kept. The OFM words are written to
  the output buffer in order.

The paper says that ReLU and pooling happen here. The requantization step and
the pooling type are this design's choices.

## Host interface (`dma_interface`, `bitbalance_top`)

The top has a single-word request port: `ext_valid`, `ext_we`, `ext_addr`,
`ext_wdata`. Read data returns one cycle later on `ext_rdata` with
`ext_rvalid`. A 32-bit address is decoded as:

| bits   | meaning                                                    |
|--------|------------------------------------------------------------|
| 31:30  | 0 IFM memory, 1 weight memory, 2 output buffer (read), 3 control |
| 29     | bank of the ping-pong pair                                 |
| 28:20  | array row (IFM, weights) or column (output)                |
| 15:0   | word address                                               |

Control words:

* **Word 0.** A write marks input bank `wdata[0]` full. A read returns
  `{out_full[1:0], in_full[1:0], done, busy}`.
* **Word 1.** A write releases output bank `wdata[0]`.
* **Word 2.** A write starts a tile.

A layer is described by the `cfg` input (`bb_pkg::cfg_t`), held stable while
the tile runs. It holds the mode, `N_nzb_max`, `T_IC`, kernel size, stride,
tile size, patch width, ReLU/pool enables and the output shift.

A typical host sequence for one tile:

1. Poll the status until an input bank is free.
2. Write the IFM patch and weight groups of channel tile 0 into it, and mark
   it full.
3. Start the tile.
4. Keep filling the other bank with the next channel tiles as banks are
   released.
5. Wait for `done`, read the output bank of every column, and release it.

The paper names the DMA interface but does not describe it; this address map
and the handshake are this design's own.

## What fits

| network   | 16-bit `N_nzb_max` | 8-bit `N_nzb_max` | runs on the default buffers? |
|-----------|-----------|----------|------------------------------|
| VGG-16    | 3 | 4 | yes (3 x 3 kernels only)                 |
| Yolo-v3   | 3 | 4 | yes (3 x 3 and 1 x 1 kernels; tiles of at most 7 x 7 for stride-2 layers) |
| ResNet-50 | 3 | 5 | all but the 7 x 7 first layer            |
| GoogleNet | 4 | 5 | all but the 7 x 7 first layer and the 5 x 5 kernels |
| AlexNet   | 3 | 5 | all but the 11 x 11 first layer (and the 5 x 5 layer at 8-bit) |

The `N_nzb_max` values are the ones the paper reports per network. The limit
is the 1K-word weight bank. All groups of one channel tile must fit in it:
`KH*KW * group_words`. An 11 x 11 kernel needs 121 x 32 = 3872 words. The
controller cannot split one kernel over several passes, so those layers would
have to be split and summed by the host.

The cycle budget agrees with the paper's frame rates. For example, VGG-16 has
about 15.5 GMAC per frame. At 16-bit with `N_nzb_max = 3`, 1024 PEs reach at
most 341 GMAC/s, which is 22 frames/s; the paper reports 20.4.

## Where this RTL departs from, or adds to, the paper

* **Additions** (the paper describes only the function): the row/column skew
  scheme, the two-engine controller schedule, the buffer word layout, the
  DMA address map and handshake, requantization, and 2 x 2 max pooling.
* **Interpretation.** The paper's loop-nest table prints the same bound on
  two rows. Its text says those rows are the tile elements and the kernel
  elements; this design puts kernel positions outside tile elements.
* **Tile size.** The paper fixes the IFM tile at 8 x 8 because of the psum
  storage. Here 8 x 8 is the output tile, which is the 64 psums one register
  file holds. The IFM patch read for it is `(tile-1)*stride + K` on a side.
* **The post-processing register file** is 32 bits wide, not 16.
* **`MAX_NZB = 8`** slots are stored per PE, a package constant. The
  networks above need at most 5.
* **Not built:** the off-chip DRAM and its burst protocol, and the offline
  quantization/retraining and encoding. There is no clock generation or pad
  ring.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/bb_pkg.sv tb/bb_tb_pkg.sv $(ls rtl/*.sv | grep -v bb_pkg) \
        tb/tb_pe_array.sv --top-module tb_pe_array -o sim
    ./obj_dir/sim

The two packages must come first. `-Wno-fatal` keeps style warnings from
stopping the build.

The end-to-end tests drive the whole accelerator through its DMA port and
compare every output word with a reference convolution. The layer
configurations cover:

* 16-bit and 8-bit modes;
* `N_nzb_max` from 2 to 8;
* 1 x 1 to 3 x 3 kernels, strides 1 and 2;
* one to three channel tiles;
* ReLU and pooling.

They also count how often each mechanism occurred:

* empty-slot gating and negative weights;
* bank switches;
* the DMA waiting for a bank;
* the compute engine waiting for the loader;
* ReLU clipping and pooling.

A mechanism that never occurred counts as a failure.

* `tb_bitbalance_top` uses a 4 x 4 array and six layers.
* `tb_bitbalance_full` runs the default 32 x 32 design on four layers. It
  takes about 20 s of simulation after a few minutes of compilation.
* `tb_bitbalance_workloads` runs one output tile of typical layers of each
  network in the table above, in both precisions, at that network's
  `N_nzb_max`, on the default 32 x 32 design (about 7 minutes with
  compilation). The layers are AlexNet 5 x 5 and fully
  connected, VGG-16 3 x 3 with pooling, GoogleNet and ResNet-50 1 x 1 and
  3 x 3 (stride 2 for ResNet), and Yolo-v3 3 x 3 at strides 1 and 2. The
  layers that do not fit are left out.

The remaining tests check the parts:

* `tb_top_controller` checks the exact cycle count of a tile.
* `tb_pe_array` checks the `N_PE + c` latency, using the encoding example
  above in a small array.
