# Chain-NN: convolution on a one-dimensional chain of PEs

Most of the energy in a CNN accelerator goes into moving operands, not into
arithmetic. Chain-NN keeps kernel weights inside the processing engines (PEs)
and passes ifmap pixels and partial sums only between neighbouring PEs. The
PEs form a single 1D chain. At run time the chain is cut into *systolic
primitives* of K·K adjacent PEs, one per output channel. Every primitive
sees the same stream of ifmap pixels. Each primitive finishes one K×K
convolution window per cycle.

The chain is 1D, so a primitive can be any length. Any kernel size uses
almost the whole chain. On 576 PEs:

| K  | PEs per primitive | primitives | PEs in use | use    |
|----|-------------------|------------|------------|--------|
| 3  | 9                 | 64         | 576        | 100 %  |
| 5  | 25                | 23         | 575        | 99.8 % |
| 7  | 49                | 11         | 539        | 93.6 % |
| 9  | 81                | 7          | 567        | 98.4 % |
| 11 | 121               | 4          | 484        | 84.0 % |

(9 × 9: 567 of 576 is 98.4 %. The original publication's table prints 100 %
for this row.)

This repository holds synthesizable SystemVerilog for the accelerator:

- the chain of 576 dual-channel PEs, each with its kernel store (kMemory);
- an ifmap buffer (iMemory) and an output accumulation buffer (oMemory);
- the generator of the input order;
- the control state machine.

The off-chip memory is not included. Its traffic uses three ports of the top
module `chain_nn`: a kernel stream, an iMemory write port and an oMemory
read port.

## 1. What is computed

A convolutional layer computes, for output channel m and position (x, y),

    out[m][x][y] = Σ_c Σ_i Σ_j in[c][x+i][y+j] · W[m][c][i][j]      (stride 1)

The hardware works on *tiles*. A tile covers K adjacent output rows, the
full width of the ifmap, and a group of output channels. K output rows need
2K−1 ifmap rows. This 2K−1 × W block of one ifmap channel is called an
*input pattern*. A run streams the patterns of all channels c of the tile,
one after another. oMemory adds up the results for the different channels.

Arithmetic uses 16-bit two's-complement operands and 32-bit partial sums,
with no rounding or saturation. Where the binary point sits is up to the
user. The hardware does not add a bias, apply an activation, or pool.

## 2. The column-wise scan input order (the central idea)

A primitive multiplies the K² pixels that entered it most recently by its
K² weights. It gives a correct result only when those K² pixels are exactly
one convolution window, in the order that matches the weights.

With one pixel per cycle, no input order can achieve this every cycle.
Neighbouring windows share at most K(K−1) pixels, so each new window needs K
new pixels. A single-channel chain is therefore busy only 1/K of the time.

Chain-NN uses two input channels:

- **OddIF** carries the odd ifmap columns.
- **EvenIF** carries the even ifmap columns.

Pixel (column c, row r), both counted from 1, is sent at timestamp

    t = K·(c − 1) + r,     r = 1 … 2K−1,   on the channel of c's parity.

For K = 3 and a 5-row pattern, the timestamps are:

| row \ column | 1 | 2 | 3  | 4  | 5  | 6  | 7  |
|--------------|---|---|----|----|----|----|----|
| 1            | 1 | 4 | 7  | 10 | 13 | 16 | 19 |
| 2            | 2 | 5 | 8  | 11 | 14 | 17 | 20 |
| 3            | 3 | 6 | 9  | 12 | 15 | 18 | 21 |
| 4            | 4 | 7 | 10 | 13 | 16 | 19 | 22 |
| 5            | 5 | 8 | 11 | 14 | 17 | 20 | 23 |

Odd columns go on OddIF and even columns on EvenIF. Each channel sends a
column of 2K−1 pixels every 2K cycles. It is idle for one cycle in 2K.
EvenIF starts K cycles after OddIF.

The key property: for every t from K² to K·W+K−1, the pixels with
timestamps t−K²+1 … t form one K×K window. The window is scanned column by
column. Window t has:

- first column c0 = (t − K²) div K + 1;
- row offset s = (t − K²) mod K, i.e. rows s+1 … s+K.

For example, t = 9 is rows 1–3 of columns 1–3. t = 10 is rows 2–4 of the
same columns. t = 12 is rows 1–3 of columns 2–4.

So a new window completes every cycle, as long as each PE can take its pixel
from whichever channel carries it. A pattern therefore gives K·(W−K+1)
results per primitive in K·W+K−1 cycles. Output n of a pattern is ofmap
column n div K, row n mod K.

Each timestamp carries two pixels, one per channel. For example, timestamp
10 carries (column 3, row 4) on OddIF and (column 4, row 1) on EvenIF. Which
one a PE needs depends on the window. PE j of a primitive (j = 0 at the
primitive input) multiplies the pixel at window position p = K²−1−j in
column-scan order. That pixel lies in window column cw = p div K, and its
ifmap column is c0 + cw. So the PE takes:

- OddIF when (c0 odd) XOR (cw odd);
- EvenIF otherwise.

`scan_gen` attaches the parity of c0 to every window as the `podd` control
bit. The bit travels down the chain with the window. Each PE holds the
parity of its own cw (`cfg_flip`).

Consecutive patterns run back to back. Each channel of a tile, and each
output-channel group, is a new pattern. The K−1 window slots that would
straddle two patterns produce no result (`wv` = 0). A tile of G·C patterns
therefore takes G·C·(K·W+K−1) cycles.

## 3. The PE and the systolic primitive

Each PE (`pe`) has:

- **Two ifmap channels.** Each passes through two registers to the next PE,
  so a pixel moves down the chain at one PE per two cycles.
- **Window control** (`win_ctrl_t`: `wv`, `podd`, `kaddr`), with one
  register per PE. It moves one PE per cycle, as the partial sum does.
- **A three-stage MAC.** Let the window's control reach the PE at cycle T:
  - stage 1 (T+1): the channel mux output and the kMemory weight at `kaddr`
    are registered;
  - stage 2 (T+2): the 16×16 product is registered;
  - stage 3 (T+3): the product is added to the partial sum from the
    previous PE and registered.
- **Primitive-port muxes.** In the first PE of a primitive (`cfg_first`),
  the channels and the control come from the broadcast primitive input, and
  the incoming partial sum is replaced by 0. In the last PE (`cfg_last`),
  the partial sum is the primitive's result, and `out_valid` marks it.

Pixels move two cycles per PE and the window moves one cycle per PE. So, as
the window advances one PE, the pixel at that PE becomes one stream position
older. PE j multiplies the pixel that entered j positions before the
window's newest pixel. The window whose newest pixel enters at cycle T
leaves the primitive at **T + K² + 2**. The same holds for every primitive,
because all primitives are fed in parallel.

kMemory (`kmem`) is a 256 × 16-bit register file in every PE, with a
registered read. Its read address comes with the window. The weight used by
a PE therefore changes exactly when the first window of a new pattern
reaches that PE, with no pipeline drain between channels.

**Cutting the chain** (`chain`). Each PE's role depends only on two things:
its index g and K. Let j = g mod K². Then:

- `first` = (j = 0);
- `last` = (j = K²−1);
- `flip` = ((K−1−j div K) odd).

These bits are constant tables per PE, selected by `cfg_k` (K = 2 … 11).
Output lane p is taken from PE (p+1)·K²−1. Here, too, a small
elaboration-time multiplexer selects the PE by K. Lanes from
prim_count(K) = min(⌊576/K²⌋, 64) upward carry 0. PEs at the end of the
chain that do not complete a primitive run idle.

## 4. Memories and data layouts

The host has to lay out three memories.

**Kernels.** For OP_KLOAD with C channels and G groups, the host sends
C·G·576 words. Each block of 576 words fills the chain's kernel shift
registers and is then written to one kMemory address. Blocks go to addresses
0, 1, … in order g·C + c. Within a block, the first word ends up in the last
PE (index 575), so word s goes to PE 575−s. That PE belongs to primitive
q = PE div K², which computes output channel g·P + q (P = primitives in use).
Let j = PE mod K² and p = K²−1−j. The PE needs weight W[m][c][p mod K][p div K].
PEs outside the used primitives take any value.

**iMemory** (`imem`, 32 KB) has two banks of 8192 × 16 bit. Bank 0 holds
odd columns and feeds OddIF; bank 1 holds even columns and feeds EvenIF.
Each bank stores pixels in the order the channel streams them:

1. for each ifmap channel of the run;
2. its columns of that parity, left to right;
3. each column's 2K−1 rows, top to bottom.

The read address then only counts up. It restarts at 0 for each
output-channel group.

**oMemory** (`omem`, 64 banks × 100 × 32 bit = 25.6 KB) holds the result for
primitive p (output channel g·P + p), output row s and column e of the tile
at linear address

    L = (g·K·E + K·e + s)·P + p,       E = W − K + 1.

Word L is in bank L mod 64, row L div 64. In one cycle the P results have
consecutive addresses, so they always fall into P different banks. Lane p is
rotated to bank (L0 + p) mod 64. The first ifmap channel of a run overwrites
a word and later channels add to it. If the run was started with `cfg_acc`,
the first channel adds too. The host reads word L through `om_addr` with one
cycle of latency. `om_overflow` flags a tile that ran past the storage.

## 5. Operating the accelerator

A command is `start` with `op` (0 = load kernels, 1 = run) and the
configuration:

- `cfg_k` is the kernel size.
- `cfg_w` is the pattern width W.
- `cfg_c` is the number of ifmap channels C.
- `cfg_g` is the number of output-channel groups G.
- `cfg_kbase` and `cfg_acc` apply to runs only.

`done` pulses when the command ends. A configuration the hardware cannot
hold raises `cfg_err`, pulses `done` at once and does nothing. This covers:

- K outside 2 … 11;
- C or G zero;
- cfg_kbase + C·G > 256;
- W < K;
- a tile larger than iMemory or oMemory.

`n_prim` reports P.

1. Write the tile into iMemory (`im_*`).
2. OP_KLOAD: stream the kernel words on `k_valid/k_data/k_ready`. One word
   is taken per cycle, and gaps in `k_valid` stall the load. The load takes
   C·G·576 words plus one cycle.
3. OP_RUN: `done` rises G·C·(K·W+K−1) + K² + 8 clock edges after the edge
   that took `start`.
4. Read the results from oMemory.

Kernels stay in kMemory across runs. A whole batch of images, and all row
tiles of each image, reuse one kernel load.

If a tile's channels do not fit iMemory at once, run them in parts:

- load the kernels of all C channels once;
- start each part with `cfg_kbase` = its first kMemory address;
- set `cfg_acc` for every part after the first.

## 6. Which layers fit

P is the number of primitives for the layer's K, from the table above.

| layer | fits | why |
|---|---|---|
| AlexNet conv2 (K=5, 48 ch/group, 31-wide padded) | yes | iMemory 48·9·16 = 6912 words per bank; G = 2 groups (46 output channels) per run; oMemory 2·3105 words |
| AlexNet conv3 (K=3, C=256, 15-wide padded) | yes, in two parts | iMemory would need 10240 > 8192 words, so each tile runs as two 128-channel parts; kMemory 256 words; about 361 k cycles per image |
| AlexNet conv4, conv5 (K=3, 192 ch/group) | yes | iMemory 7680 words, kMemory 192 words, oMemory 2496 words |
| AlexNet conv1 (K=11, stride 4) | no | only stride 1 is built; even as a stride-1 layer, a full-width tile needs 9548 oMemory words |
| VGG-16 (K=3, 226-wide) | no | a full-width tile needs 43008 oMemory words; needs column tiling by the host |

The layer sizes of AlexNet and VGG-16 are the usual published ones.

## 7. Where this RTL follows the original design and where it does not

**Taken from the design:**

- a 1D chain of 576 PEs cut into K²-PE primitives with primitive input and
  output ports;
- two ifmap channels per PE, two registers each, a channel mux, and a MAC
  onto the partial sum from the previous PE;
- a first-PE mux that starts the partial sum at zero;
- kMemory of 256 16-bit weights per PE;
- three pipeline stages per PE;
- the column-wise scan order with 2K−1-row patterns;
- iMemory 32 KB, oMemory 25 KB;
- the sequence: configure, load kernels once, then stream;
- accumulation of output channels in oMemory.

**Choices of this implementation.** The original description does not fix
these:

- what each of the three PE stages holds;
- the channel-select rule (`podd` XOR `cfg_flip`);
- the window control travelling with the data, including the kMemory
  address;
- kernel loading through a shift chain, one word per cycle;
- broadcast primitive inputs;
- at most 64 output lanes, so K = 2 uses 64 of its 144 possible
  primitives;
- 32-bit partial sums;
- the odd/even bank split and layout of iMemory;
- the 64-bank rotated layout of oMemory and its single-cycle
  read-modify-write;
- K−1 empty window slots between consecutive patterns;
- the command interface and its checks;
- `cfg_kbase`/`cfg_acc` for channel-split tiles.
- kMemory is read every cycle. Its address changes only between
  patterns, so the read data stays constant for K·W+K−1 cycles, but no
  read enable gates the array.
- A result leaves a primitive K²+2 cycles after its last pixel entered.
  The original text speaks of an output delay that does not depend on K.
  Here the rate is constant (one result per cycle for every K), but the
  latency grows with K², because the partial sum passes one register per
  PE.

**Conflicting details:**

- The original text says EvenIF starts "(K+1) cycles" after OddIF. Its
  timestamp figure shows EvenIF's first pixel at timestamp K+1, against 1
  for OddIF, which is a delay of K cycles. This RTL follows the figure.
- The 9×9 utilisation is 98.4 %, not 100 %.

**Not built:**

- strides other than 1, bias, activation and pooling;
- the off-chip memory and its controller;
- any clock gating of unused PEs.

The 700 MHz clock, the 28 nm layout and the power figures of the original
chip are implementation results. This RTL does not reproduce them.

## 8. Files and simulation

| file | contents |
|---|---|
| `rtl/chain_nn_pkg.sv` | sizes, `win_ctrl_t`, `op_e`, `prim_count()` |
| `rtl/kmem.sv` | kMemory register file |
| `rtl/pe.sv` | dual-channel PE |
| `rtl/chain.sv` | the PE chain, primitive configuration and output lanes |
| `rtl/scan_gen.sv` | column-wise scan generator |
| `rtl/imem.sv`, `rtl/omem.sv` | ifmap and ofmap buffers |
| `rtl/ctrl.sv` | state machine |
| `rtl/chain_nn.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_alexnet_tiles.sv` | full-size AlexNet conv2 and conv3 row tiles |

Every testbench prints `TB_RESULT checks=N failures=M`. Each one checks
against values it computes itself: a direct convolution, the timestamp rule
above, and cycle models of the pipelines. It also has a watchdog.

`tb_chain_nn` runs the full-size design (576 PEs) through K = 3, 5, 2, 11, 7
and 9, plus a channel-split tile. In every run it checks:

- all results;
- the number of primitives;
- the exact run time.

It also counts each mechanism and fails if one never occurs:

- stalls in the kernel stream;
- use of both channels;
- idle channel slots;
- oMemory bank wrap;
- reuse of loaded kernels;
- change of kernel size;
- refusal of a bad configuration.

`tb_alexnet_tiles` runs two AlexNet layers, also at full size. Each
layer runs one complete row tile with the layer's real channel count and
width:

- conv2 (K = 5, 48 channels, 31 wide, 46 output channels);
- conv3 (K = 3, 256 channels in two 128-channel parts, 15 wide, 64 output
  channels).

It compares all 8706 results with a direct convolution, and checks
the run times. It takes a few seconds.

Run the end-to-end test with:

    verilator --binary --timing --assert -Irtl rtl/chain_nn_pkg.sv tb/tb_chain_nn.sv \
              --top-module tb_chain_nn -Mdir obj && obj/Vtb_chain_nn

It builds in a few seconds and runs in under a second. Other testbenches are
run the same way with their own name. To change the chain length, buffer
sizes or supported K range, edit the parameters of `chain_nn` or the package
constants. The testbenches of the sub-blocks run them at reduced sizes:
20 PEs, and 8 oMemory banks of 16 words.
