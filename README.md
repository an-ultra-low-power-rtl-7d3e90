# A layer-level neural co-processor for tiny CNNs

This is SystemVerilog RTL for a small neural co-processor (NCP). It sits next
to a low-end microcontroller and runs the convolutional backbone of a tiny
CNN, such as EtinyNet, entirely from on-chip SRAM. The design does not use
DRAM. The microcontroller loads the weights and a program once. For each
frame it writes the image, starts the program and reads back a feature vector.
The NCP executes one *layer* per instruction. Its hardware is built around
three operations:

* int8 convolution (1x1 "pointwise", and 3x3 through im2col),
* int8 3x3 depthwise convolution,
* float32 batch normalisation (BN) fused with ReLU and residual addition.

The configuration is the one the design was published with: TTM = 32-byte
memory words, TOC = 16 output channels, THW = 32 pixels in parallel, a 992 KB
tensor memory and a 2 KB instruction memory. It gives 512 int8 MACs in the
pointwise array, 16 x 9 multipliers in the depthwise pipelines and 16 float32
multiply-add lanes. At the design's nominal 250 MHz, that is 256 + 8 = 264
GOP/s peak.

## Block structure

```
            SPI ----+                       +---------------------------+
  host port (SDIO) -+-> ncp_io --IM write-> | ncp_inst_mem  128 x 128 b |
                        |   run             +-------------+-------------+
                        |                                 | instruction at PC
                        |                   +-------------v-------------+
                        |                   | ncp_sys_ctrl  PC, +1, mux |
                        |                   +------+--------------+-----+
                        | TM port        tm_sel    | start/instr  | done
                        v                 |        v              |
                    +--[mux 0:I/O 1:NOU]--+   +----------------------------+
                    |                         | ncp_nou  layer sequencer    |
                    |   ports 0,1,2 <-------->|  ncp_nou_conv  16x32 MACs   |
                    v                         |  ncp_nou_dw    16 x 3x3     |
          +-----------------------+           |  ncp_nou_post  16 fp32 lanes|
          | ncp_tensor_mem 992 KB |           |  ncp_layout_conv ping-pong  |
          | B0 B1 B2 B3 BI BO     |           +----------------------------+
          +-----------------------+
```

`ncp_top` wires the parts together. While a program runs, the system
controller (SC) owns the tensor memory (TM) through a two-input multiplexer.
While the SC is suspended, the I/O block owns it. The host can only read or
write TM and the instruction memory (IM) while the SC is suspended.

| file | block |
|---|---|
| `ncp_pkg.sv` | constants, opcode enum, `instr_t`, bank map |
| `ncp_fp_pkg.sv` | float32 int2float / multiply / add / float2int functions |
| `ncp_inst_mem.sv` | 2 KB IM, one write and one read port |
| `ncp_sys_ctrl.sv` | fetch, decode, start NOU, jump / sup / end |
| `ncp_sram_bank.sv` | one single-port bank with byte enables |
| `ncp_tensor_mem.sv` | six banks and a 3-port crossbar |
| `ncp_nou_conv.sv` | 16 x 32 outer-product MAC array |
| `ncp_nou_dw.sv` | 16 lanes of 9 multipliers plus an adder tree |
| `ncp_nou_post.sv` | 16 lanes: add, int2float, fp32 mul, fp32 add, float2int, ReLU |
| `ncp_layout_conv.sv` | interleaved-to-pixel-major transposer |
| `ncp_nou.sv` | layer sequencer: address generation and data steering |
| `ncp_io.sv` | SPI slave and the word-level host port |
| `ncp_top.sv` | the NCP |

## Tensor memory and its two layouts

TM has six banks in one word address space. A word is 32 bytes.

| bank | word addresses | size | use |
|---|---|---|---|
| Bank0 | 0 .. 4095 | 128 KB | feature maps |
| Bank1 | 4096 .. 8191 | 128 KB | feature maps |
| Bank2 | 8192 .. 16383 | 256 KB | weights |
| Bank3 | 16384 .. 24575 | 256 KB | weights, BN tables |
| BankI | 24576 .. 30719 | 192 KB | input image (256 x 256 x 3) |
| BankO | 30720 .. 31743 | 32 KB | results |

Every bank is single-ported. The crossbar in `ncp_tensor_mem` offers three
request ports, and each bank serves one of them per cycle. The NOU uses them
as three streams:

* port 0 reads features,
* port 1 reads weights, tables or a second operand,
* port 2 writes results.

Because each bank is single-ported, **the streams of one instruction must lie
in different banks**. This is the programmer's job. An assertion in the tensor
memory fires if two ports hit one bank in the same cycle; in that case the
lower port wins. Reads return data one cycle after the request.

A tensor of C channels and H x W pixels is stored in one of two layouts:

* **Pixel-major.** Channel c occupies H*W/32 consecutive words, pixels in
  row-major order. Word `base + c*(H*W/32) + j` holds pixels 32j .. 32j+31.
  A single word is therefore exactly one row of operands for the 16 x 32 MAC
  array. This is the layout the pointwise convolution reads.
* **Interleaved.** Channels are cut into tiles of 32. Word
  `base + t*H*W + p` holds channels 32t .. 32t+31 of pixel p. A single word
  holds all the channels of one pixel that the depthwise lanes need. Pooling
  and sampling use this layout too.

The two layouts alternate within a block: DWConv runs on interleaved data and
PWConv on pixel-major data. This is why the layout converter exists (see
below).

### Parameter tables

These formats belong to this design:

* **Convolution weights.** For output tile `ot` (16 output channels) and
  input channel `k`, the pair index is `e = ot*Cin + k`. For a 3x3 kernel,
  `k = 9*ci + 3*ky + kx` runs over `9*Cin` values (im2col order). The 16 weights of
  pair `e` sit at word `src1 + e/2`, bytes `16*(e%2)` .. `+15`. Byte `l` is
  the weight of output channel `16*ot + l`. Every weight byte in TM is used.
* **Depthwise kernels.** Word `src1 + 9*t + (3*ky + kx)`, where byte `b` is
  channel `32t + b`.
* **BN tables.** Word `src2 + c/4` holds channel c. Bytes `8*(c%4)` .. `+3`
  are the float32 scale and the next four bytes the float32 bias. The result
  is `y = x*scale + bias`.

## Instruction format

An instruction is 128 bits. The low five bits are the opcode; the fields
above it are this design's layout.

| bits | field | meaning |
|---|---|---|
| 4:0 | opcode | bn 0, relu 1, conv 2, dwconv 3, add 4, move 5, dsam 6, usam 7, maxp 8, gap 9, jump 16, sup 17, end 18 |
| 5 | relu | fuse ReLU |
| 6 | bn | fuse BN (table at src2) |
| 7 | stride2 | stride 2 (dwconv, 3x3 conv) |
| 8 | out_il | result in interleaved layout (conv, dwconv) |
| 9 | res_add | fuse residual addition |
| 24:10 | src0 | input tensor |
| 39:25 | src1 | weights / kernels / second operand of `add` |
| 54:40 | src2 | BN table |
| 69:55 | dst | output tensor; jump target (low 7 bits) |
| 78:70 | h | input height |
| 87:79 | w | input width |
| 97:88 | cin | input channels |
| 107:98 | cout | output channels (conv) |
| 123:108 | aux | word count (move) or residual tensor (conv, dwconv) |
| 124 | k3 | conv: 3x3 kernel instead of 1x1 |
| 127:125 | - | reserved, zero |

What each instruction does:

| instruction | action | layouts |
|---|---|---|
| `conv` | 1x1 stride 1, or (k3) 3x3 pad 1 stride 1 or 2; optional BN, ReLU and residual | pixel-major in; pixel-major or interleaved out; residual in the output layout |
| `dwconv` | 3x3, padding 1, stride 1 or 2, with BN/ReLU | interleaved in; interleaved out (residual allowed), or pixel-major out through the converter |
| `bn`, `relu`, `add` | element-wise; `add` takes src0 + src1 | pixel-major |
| `maxp`, `dsam`, `usam` | 2x2 max pooling, 2x sub-sampling, 2x nearest-neighbour up-sampling | interleaved |
| `gap` | mean over H*W, rounded; one word per 32-channel tile | interleaved in; H*W must be a power of two |
| `move` | copy `aux` words from src0 to dst | any |
| `jump` | PC becomes dst[6:0] | - |
| `sup` | suspend; the next RUN continues after it | - |
| `end` | suspend and reset PC to 0 | - |

Restrictions on sizes:

* H*W must be a multiple of 32 wherever a pixel-major tensor is involved.
* `cout` must be a multiple of 16.
* A 3x3 `conv` needs an output width that is a multiple of 32.
* The element-wise operations work on channel groups of 16.

## The NOU sequencer

`ncp_nou` executes one instruction from start to finish. The instruction is
held in a register. Nested counters walk through the layer; the counter nest
depends on the opcode.

The datapath has two stages:

1. An **issue** stage produces up to two TM reads per cycle (ports 0 and 1),
   together with a metadata word. The metadata word says what the data is for
   (parameter load, MAC operand, depthwise tap, pooling tap, ...), the write
   address, and so on.
2. A **consume** stage, one cycle later, sees the read data and the metadata.
   It steers the data into the compute units.

NOU-post returns results four cycles later, carrying the write address as a
tag, and port 2 writes them.

**conv.** The sequencer works one output tile at a time (16 output channels by
32 pixels).

* It first loads the 16 BN parameter pairs of the tile.
* It then streams the input channels. Each cycle, port 0 reads one pixel-major
  word and port 1 reads the matching 16 weights. The array accumulates one
  outer product per cycle, so a tile takes exactly Cin MAC cycles.
* For a 3x3 kernel (`k3`), every one of the `9*Cin` MAC steps is one tap of
  one input channel. Output tile pixels 32 wide start at an input column that
  is a multiple of 32 (stride 1) or 64 (stride 2), so the 32 input pixels of
  a tap all lie in the three words around that span. Port 0 reads those
  three words in three cycles; rows outside the image read as zero. The
  consume stage picks byte `31 + p*stride + kx` of the 96-byte window for
  pixel `p`. The weights are read with the third word, and the array
  accumulates. A 3x3 tile therefore takes `27*Cin` cycles.
* The finished tile is copied to the array's output bank. The sequencer then
  drains it through NOU-post: 16 lanes per cycle, with the residual read on
  port 0 during the drain.

**dwconv.** The sequencer works on 16-channel groups. The group's kernels
(9 taps) and BN parameters are loaded first. Then, for each output pixel, the
nine window words are read on port 0, one per cycle; taps outside the image
read as zero. The collected window is presented to NOU-dw, whose sums go
through NOU-post. Two output paths follow:

* **Interleaved output.** Results are written byte-masked, one half word per
  group. A residual is read on port 1.
* **Pixel-major output.** The 16-channel results of consecutive output pixels
  go into the layout converter. It emits one 32-pixel row per channel, and
  each row is written as one word.

**Layout converter.** The converter (`ncp_layout_conv`) has two 16 x 32
register arrays.

* While one array is filled column by column (16 channels of one pixel per
  cycle), the other is read out row by row (32 pixels of one channel per
  cycle).
* When the filling array is full and the other is empty, the two swap roles.
* Filling takes 32 cycles and reading 16, so the input never has to wait.
* The first row comes out two cycles after the column that completes an
  array.

**Element-wise, pooling, gap, move.** These operations read on port 0 (and on
port 1 for `add`'s second operand), go through NOU-post where that applies,
and write on port 2. `gap` accumulates over all pixels in int32 and writes
one rounded average per channel.

At the end of each instruction, and between depthwise groups, the sequencer
waits a fixed `2*THW + 8` cycles. This lets the post pipeline and the
converter drain before `done_o`.

## Arithmetic

* Activations and weights are int8; products are summed in int32.
* With BN on, NOU-post converts the int32 sum (plus any residual, added
  first) to float32. It then multiplies by the scale and adds the bias, each
  rounded to nearest even. Finally it converts back to int8, rounding to
  nearest even and saturating.
* Subnormal floats are flushed to zero; overflow saturates to the largest
  finite value.
* With BN off, the integer sum is saturated straight to int8.
* ReLU is applied last.

## System controller

The SC starts in the halted state. A RUN from the host starts fetching at the
current PC. Each instruction takes:

* one cycle to read IM,
* one cycle to decode,
* for a neural instruction, a start pulse to the NOU and a wait for `done`.

The PC is loaded through a two-input multiplexer: input 0 is PC+1 and input 1
a target.

* `jump` selects its target.
* `end` selects 0.
* `sup` steps to PC+1.

`running_o` drops on `sup` and `end`. `ended_o` says which of the two it was.

## Host interfaces

**Host port.** The host port is a word-wide port meant to sit behind an SDIO
device core (the core itself is not included). A one-cycle `host_req_i`
does one of four things:

* writes a TM word,
* reads a TM word (`host_rvalid_o` one cycle later),
* writes an IM word (`host_im_i`),
* starts the program (`host_run_i`).

`host_ready_o` is low while the program runs.

**SPI.** The SPI slave works in mode 0, MSB first. `clk` must be at least four
times SCK. Each transaction starts with a command byte:

| byte 0 | then |
|---|---|
| `01` WR_TM | address high, address low, 32 data bytes (byte 0 first) |
| `02` RD_TM | address high, address low, one dummy byte; the word then comes out on MISO |
| `03` WR_IM | address high, address low, 16 instruction bytes (bits 7:0 first) |
| `04` RUN | - |
| `05` STAT | one dummy byte; then `{6'b0, ended, running}` |

When the host port and SPI both have a request, the host port wins.

## Where this design departs from the published one

* **The 3x3 convolution runs at one third of the array's rate.** The three
  window words of each tap come through the single feature port. The
  original keeps the array busy every cycle.
* **The depthwise path is not fully pipelined.** The nine window taps of an
  output pixel are fetched one per cycle, without a line buffer. NOU-dw itself
  accepts a window every cycle, but it only gets one every nine cycles.
* **The MAC array does not overlap tiles.** It waits while a finished tile
  drains through NOU-post. The convolution therefore runs below the stated
  "every cycle" utilisation, although each accumulation phase does use all
  512 MACs every cycle.
* **No separate NOU output multiplexer.** The original block diagram shows
  one selecting NOU-conv, NOU-dw or NOU-post for the memory. Here every
  computed result passes through NOU-post, which bypasses its float stages
  when BN is off. Copies and pooling results go straight to the write port.
* **The tensor memory has three ports.** Each bank is single-ported, but the
  three ports let a feature read, a weight read and a result write proceed in
  the same cycle.
* **Encodings are this design's own:** opcode values, field layout, table
  formats, the rounding rules, the SPI protocol and the host port. The
  original does not publish any of them.
* **Element-wise BN and bn-fused `add`** take their channel from the
  pixel-major layout. On interleaved data, only a plain `add` (no BN) is
  meaningful.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. `tb/ncp_ref_pkg.sv` is a golden model of
every neural instruction. It models TM as an array, computes each layer with
plain loops from the layout formulas, and does float32 in double precision
rounded to single; it shares no code with the RTL.

| testbench | what it checks |
|---|---|
| `tb_ncp_nou_post` | random vectors through every source, BN, ReLU and residual combination, against the model; latency 4 |
| `tb_ncp_nou_conv` | random outer-product sequences; output bank timing |
| `tb_ncp_nou_dw` | random windows and kernels, one per cycle; latency 3 |
| `tb_ncp_layout_conv` | continuous and gapped column streams; transposition, order and swaps |
| `tb_ncp_tensor_mem` | every bank boundary, byte enables, three ports in parallel |
| `tb_ncp_inst_mem` | every IM word |
| `tb_ncp_sys_ctrl` | fetch order, jump, sup/resume, end, NOU hand-shake, mux select |
| `tb_ncp_io` | every SPI command and the host port |
| `tb_ncp_nou` | 16 instructions covering all variants (including 3x3 conv, stride 1 and 2), compared word for word over two banks; the MAC array busy exactly `cout/16 * H*W/32 * Cin` cycles per conv; converter swaps |
| `tb_ncp_top` | full-size end-to-end run (below) |

`tb_ncp_top` instantiates `ncp_top` with its default sizes. It plays the
host:

1. It clears all 992 KB of TM through the host port.
2. It loads a 32 x 64 x 3 input image, weights and two BN tables.
3. It writes a 13-instruction program. Instruction 0 and the RUN go over SPI.
   The program is:
   * a 3x3 stride-2 stem convolution with BN and ReLU;
   * max pooling;
   * a linear depthwise block (DWConv-BN to pixel-major through the converter,
     PWConv-BN-ReLU, DWConv-BN-ReLU);
   * a jump over a trap instruction;
   * `sup`, after which the testbench reads the whole TM and compares it with
     the model, then resumes;
   * a dense-block step with residual;
   * global average pooling;
   * a `move` to BankO;
   * `end`.
4. After `end` it compares the whole TM again.
5. It counts these events and fails if any never happens: jump, suspend, end,
   resume, TM hand-over between I/O and NOU, converter swap, residual
   addition, BN, 3x3 MAC step, SPI command, host access.

It runs in under a minute with Verilator.

To simulate with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/ncp_pkg.sv rtl/ncp_fp_pkg.sv tb/ncp_ref_pkg.sv tb/tb_ncp_top.sv \
    --top tb_ncp_top -o sim
./obj_dir/sim
```

Replace `tb_ncp_top` with any other testbench name. The block testbenches
that do not use the golden model need only the two packages.

## Sizing notes

* EtinyNet has 477 K backbone weights. These fit the 512 KB of Bank2 and
  Bank3, leaving about 35 KB for BN tables (8 bytes per channel here).
* The 256 x 256 x 3 input exactly fills BankI.
* After the first layer and max pooling, the largest feature map is
  64 x 64 x 32 = 128 KB, exactly one feature bank.
* The unpooled output of the first layer (128 x 128 x 32 = 512 KB) would not
  fit a feature bank. A program must therefore run the stem in row strips.
  Each strip is a 3x3 `conv` over a pixel-major slice of the image with one
  extra row of overlap, followed by a `maxp` into the other feature bank.
  The host has to lay the input out as such overlapping strips.
