# BitFair: a bit-serial CNN accelerator that stops computing outputs ReLU will zero

Most outputs of a ReLU convolution layer end up as zero, yet an ordinary
accelerator computes each one in full before ReLU discards it. BitFair
processes weights one bit plane at a time. After each plane it can see
whether an output is already hopeless. Each output `y = ReLU(sum_i a_i * w_i + b)`
is built up plane by plane: the magnitude bits of every weight are fed in one
bit position at a time, with the running sum updated for every input.
After `k` planes the bias-free partial sum is

    P_k = sum_{j<k} sum_i (-1)^{s_i} * b_{i,omega(j)} * a_i * 2^{omega(j)}

If `P_k <= theta` for a per-layer threshold `theta`, the output is declared
zero and the processing element (PE) stops working on it. Two per-layer
values are learned offline and loaded into the chip's layer table:

- the threshold `theta`;
- the bit order `omega`, which decides which magnitude bit is processed first.

The order need not be MSB first. The hardware only has to:

- shift by `omega(j)` instead of a fixed amount;
- compare against `theta` at the end of every bit plane;
- make good use of the cycles and memory reads that the stopped outputs no
  longer need.

This repository holds synthesizable SystemVerilog for the whole accelerator:

- a 16×16 array of bit-serial PEs with per-row termination control;
- an FSM controller that walks the convolution loop nest;
- the on-chip SRAMs (2 × 32 KB activations, 2 × 16 KB weights, 8 KB
  output buffer, 104 KB in all);
- configuration registers and an AXI4-Lite host port.

Every block has a self-checking testbench. So does the whole design, which
runs a three-layer network end to end against a bit-exact reference model.

## Number formats

| quantity | format |
|---|---|
| activation | 8-bit two's complement |
| weight | 8-bit sign-magnitude: bit 7 is the sign, bits 6..0 the magnitude |
| partial sum | 16-bit two's complement, saturating |
| bias | 16-bit two's complement, one per output channel |
| threshold `theta` | 16-bit two's complement, one per layer |

A layer may use from 1 to 7 magnitude planes (`nbits`). Slot `j` of the
layer's order table holds `omega(j)`, the weight bit position processed in
the `j`-th plane. Only the first `nbits` slots are used. A layer with fewer
planes simply ignores the weight bits it never visits.

## The processing element (`bitfair_pe`)

Each PE owns one output value: the array is output stationary. In every MAC
cycle it receives:

- one activation `a`;
- the weight bit `b = w[omega(j)]` and the weight sign `s`;
- the shift amount `omega(j)`.

The datapath is the one the method calls for:

1. An AND of `b` with `a`.
2. A conditional negation when `s` is set. Activations are signed, so
   the product's sign comes from both operands.
3. A barrel shift left by `omega(j)`.
4. A 16-bit accumulate.

The accumulator saturates rather than wraps. A wrapped sum could turn a large
positive output into a large negative one and falsely terminate it.

The controller marks the MAC that closes a bit plane. On that cycle, if the
layer has ReLU and this is not the last plane, the PE compares the new sum
with `theta`. If `P_k <= theta`, it raises `term`. From then on its
accumulator no longer updates; the register enable is the RTL form of clock
gating. The result will be zero.

When the tile is finished, `latch` forms the 8-bit output:

- terminated: `0`;
- otherwise: `ReLU(sat(P_K + bias)) >>> out_shift`, clamped to 0..127;
- for a layer without ReLU: `sat(P_K + bias) >>> out_shift`, clamped to
  −128..127. Such a layer never terminates.

The bias is added only at this point, because the threshold is defined on
the bias-free sum (the learned `theta` absorbs the bias). The shift-and-clamp
requantisation back to 8 bits is this design's choice; the method only fixes
8-bit activations. Termination is tested only at plane boundaries.
A test in the middle of a plane would compare a sum that still lacks some
inputs' contributions at that bit position.

## Mapping a convolution onto the array

The array computes one output row `oh` at a time, 16 output channels by 16
output columns per tile:

    for oh            in 0 .. OH-1
      for oc0         in 0, 16, ... < OCH        (array rows)
        for ow0       in 0, 16, ... < OW         (array columns)
          clear; read bias
          for j       in 0 .. nbits-1            (bit plane, bp = omega(j))
            for kh, kw, ic                       (one MAC cycle each)
          latch; write back 16 rows of 16 outputs

PE(r, c) computes output channel `oc0 + r` at position `(oh, ow0 + c)`:

- all PEs of row `r` use the same weight, from weight bank `r`;
- all PEs of column `c` use the same activation, pixel `ow0 + c + kw` of
  input row `oh + kh`.

Rows and columns beyond the layer's channel count or width are switched off
with `row_active` / `col_active`. Convolution is stride 1 without padding.
Pooling is not part of the datapath.

Weights travel along rows and activations along columns, as in the
architecture drawing. One sentence of the original description says the
reverse. The two are equivalent up to transposing the array; this code
follows the drawing.

## Early termination at three levels

1. **PE.** A terminated PE stops accumulating. Its output is forced to zero.
2. **Row (`bitfair_term_ctrl`).** When every active PE of a row has
   terminated, or the row is unused, the row is *done*. Its weight bank is
   then no longer read; the bank keeps its last output. This saves the
   memory energy that dominates a bit-serial design. The termination
   controller also selects bit `omega(j)` and the sign out of the weight
   byte for its row.
3. **Tile (`bitfair_ctrl`).** When all 16 rows are done, the controller
   skips the remaining planes of the tile and goes straight to write-back.
   This is where cycles, not only energy, are saved.

The speed-up reported by the performance counters is the ratio of vanilla
MAC cycles to the cycles actually spent. Vanilla means all planes are always
processed. The end-to-end test prints that ratio. In a tile that does not
exit early, terminated PEs save energy but not time.

## Memories

**Activation SRAMs (`bitfair_act_sram`).** There are two 32 KB SRAMs, each of
16 byte-wide banks × 2048 words. A layer reads its input from one and writes
its output to the other; `src_sel` in the layer descriptor picks which. A
feature map of `C × H × W` is stored channel-major: pixel `(ch, y, x)` is in
bank `x mod 16`, at word

    base + (ch*H + y) * ceil(W/16) + x/16

Any 16 consecutive pixels of a row fall into 16 different banks. The array
needs 16 pixels starting at an arbitrary `x = ow0 + kw`, so each bank
computes its own word address. A rotation then hands bank `(xoff + c) mod 16`
to column `c`, and one window is read per cycle. A finished output row
(16 pixels of one channel, starting at a multiple of 16) is one word in every
bank. The write-back writes it in a single cycle, with a mask for a partial
last tile. One SRAM holds at most `C*H*ceil(W/16) <= 2048` words per bank.

**Weight SRAM (`bitfair_wgt_sram`).** 32 KB, organised as 16 banks × 2048
bytes, one bank per array row. Bank `r` holds output channels `r, r+16, ...`.
Each group of 16 channels starting at `w_base` has the layout:

    grp_base = w_base + g * (KH*KW*ICH + 2)
    grp_base + 0, +1 : bias, low byte then high byte
    grp_base + 2 + (kh*KW + kw)*ICH + ic : weight (sign-magnitude)

The same words are read once per bit plane. Only the bit position changes.

**Output buffer (`bitfair_out_buf`).** 8 KB, 16 banks × 512 bytes. A layer
with `obuf_en` also copies its outputs here, for the host to read.

All banks are built on `bitfair_sram_bank`. It is a single-port array with a
registered read and holds its output while not read, as an SRAM macro's
output latch does.

## Controller timing

One MAC cycle processes one `(kh, kw, ic)` position of one bit plane, for
all 256 PEs at once. Activation and weight reads are issued one cycle before
the data reach the PEs. The controller therefore delays its per-MAC tags by
one cycle:

- valid;
- plane end;
- last plane;
- `omega(j)`.

A tile costs:

- 2 cycles to read the 16-bit bias (low byte, then high byte);
- `nbits * KH*KW*ICH` MAC cycles, or fewer with an early exit;
- 1 drain, 1 latch and 1 step-to-next-tile cycle, so 5 fixed cycles in all;
- 1 extra cycle after an early exit.

The 16 write-back cycles (one PE row per cycle) overlap the next tile's
computation. If a tile finishes before the previous write-back is done, the
controller stalls at the latch step; the stall counter records these cycles.
This is the only stall in the design: operands come from on-chip SRAM at a
fixed rate. A layer adds a few cycles to load its descriptor.

## Host interface and registers

The host uses a 32-bit AXI4-Lite slave (`bitfair_axi_lite`). It handles one
transaction at a time and always answers OKAY. Byte address bits 19:18
select a region; bits 17:2 form a word index `idx`. Memory regions move one
byte per access, in data bits 7:0.

| region (bits 19:18) | contents | index |
|---|---|---|
| 0 | registers | register number |
| 1 | activation SRAMs | `idx[15]` = SRAM A/B, `idx[14:4]` = word, `idx[3:0]` = bank |
| 2 | weight SRAM | `idx[14:4]` = word, `idx[3:0]` = bank |
| 3 | output buffer (read only) | `idx[12:4]` = word, `idx[3:0]` = bank |

Memory accesses wait while the accelerator runs; register accesses do not.

| register | number | meaning |
|---|---|---|
| CTRL | 0 | write bit 0 = start (ignored while busy) |
| STATUS | 1 | bit 0 busy, bit 1 done (also drives `irq`) |
| NLAYERS | 2 | number of layers in the run, 1..8 |
| CYCLES | 4 | busy cycles of the last run |
| MACS | 5 | MAC cycles issued |
| TILES | 6 | tiles computed |
| EARLY | 7 | tiles that ended by early exit |
| STALLS | 8 | write-back stall cycles |
| WSKIP | 9 | weight-bank reads suppressed (row-cycles) |
| LAYER *l* | 0x40 + 8*l + 0..5 | layer descriptor, words below |

| word | bits |
|---|---|
| 0 | `ich[7:0]`, `och[15:8]`, `ih[23:16]`, `iw[31:24]` |
| 1 | `kh[3:0]`, `kw[7:4]`, `nbits[10:8]`, `relu_en[12]`, `src_sel[13]`, `obuf_en[14]`, `out_shift[19:16]` |
| 2 | `theta[15:0]` |
| 3 | `omega(j)` in bits `3j+2 : 3j`, j = 0..6 |
| 4 | `in_base[10:0]`, `out_base[26:16]` (activation words) |
| 5 | `w_base[10:0]` (weight words) |

A run goes as follows:

1. Load the weights and the input map.
2. Write the descriptors and NLAYERS.
3. Write CTRL = 1.
4. Wait for `irq`.
5. Read the output buffer and the counters.

## What is this design's own

The method fixes the following:

- the array size and dataflow;
- the number formats;
- the PE datapath (AND, sign handling, shift by `omega(j)`, accumulate,
  compare with `theta`, zero-or-ReLU output);
- the per-row termination controllers;
- the loop nest;
- the memory sizes.

The following are this design's choices:

- memory banking, data layouts and the rotation network;
- the bias storage and bias-add point;
- saturation and requantisation;
- the register map and the layer-table depth of 8;
- the host address map;
- the cycle-level schedule;
- using the two activation SRAMs as ping-pong buffers.

The original architecture drawing labels the host port "APB & CSR" in one
place and AXI elsewhere; AXI4-Lite was chosen. Clock gating is expressed as
register and SRAM enables. No gating cells are instantiated.

## Capacity

Feature maps must fit one activation SRAM. The check is
`C*H*ceil(W/16) <= 2048` per bank, for both a layer's input and its output.
Without pooling or strided convolution, small inputs fit:

- 28×28 and 34×34 digit networks: yes;
- a 32×32×3 network: up to 32 channels.

A 128×128 or 96×96 input does not fit: its first convolution output is
already too large, and the weights of a 6-layer, 32K-parameter network
exceed one bank. Networks of that size would need pooling or strides that
this datapath does not have. The original chip is reported to run networks
of these sizes from its on-chip memory, and a 128×128 gesture network at
about 62,000 cycles per frame. At full resolution the first layer alone
takes about 132,000 cycles here. Both facts point to downsampling layers
whose hardware was never described. They are not built here.

## Testbenches and simulation

Each `tb/tb_<module>.sv` drives one block with random stimulus. It compares
the block with a model written independently in the testbench, and ends by
printing `TB_RESULT checks=N failures=M`. A watchdog ends a hung run.

`tb_bitfair_top` runs the complete design at its default size through
AXI4-Lite. It loads a three-layer network and runs it, then reads back every
output of every layer from the activation SRAMs and the output buffer, and
the performance counters. The three layers are:

1. 2→20 channels, 3×3 kernels, 7 planes in a non-MSB-first order;
2. 20→10 channels, 3×3 kernels, 4 planes;
3. 10→4 channels, 1×1 kernels, 1 plane, no ReLU, to the output buffer.

The reference model computes the expected output, each PE's termination
plane, and the exact number of MAC cycles including early tile exits. The
test fails if any mechanism never occurred:

- PE termination;
- tile early exit;
- suppressed weight reads;
- write-back stall.

`tb_bitfair_workloads` runs two networks of the evaluated sizes, with
random weights and 3×3 kernels, through the whole design. The first has a
28×28×1 input and channels 8-16-32-32. The second has a 34×34×2 input and
channels 16-16-32-32. The test checks the outputs of the last two layers,
and that the MAC-cycle count matches the model exactly. It also reports the
savings. With random, untrained weights and a threshold somewhat below zero,
about 15% of the per-output bit planes are skipped. But no 16×16 tile
terminates as a whole, so the cycle count does not drop. Cycle savings need
trained thresholds and orders that make whole tiles stop together. The
first network takes about 279,000 busy cycles, the second about 393,000.

To simulate with Verilator 5:

    verilator --binary --timing --assert -y rtl +libext+.sv \
        rtl/bitfair_pkg.sv tb/tb_bitfair_top.sv --top-module tb_bitfair_top
    ./obj_dir/Vtb_bitfair_top +verilator+rand+reset+2

Replace `top` by `pe`, `pe_array`, `ctrl`, … to run a block's testbench.
The whole-design test takes a few seconds, the workload test about 15.
