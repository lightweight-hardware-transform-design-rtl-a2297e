# A two-multiplier-bank inverse transform for VVC decoders

This is synthesizable SystemVerilog for the inverse transform stage of a VVC
(H.266) decoder. The stage takes a block of dequantised coefficients and
produces the residual block. It covers:

* the inverse low-frequency non-separable transform (LFNST);
* the 1-D inverse multiple transform selection (MTS) kernels: DCT-II from 4
  to 64 points, DST-VII and DCT-VIII from 4 to 32 points;
* the 2-D transform, done as two passes of the 1-D core through a transpose
  memory.

The central idea is a budget of 64 ordinary multipliers, 32 for the MTS and
32 for the LFNST, shared by every kernel and block size. Each core delivers
2 samples per clock cycle. Each core also has a *fixed* latency that does
not depend on the block size or kernel, so the time a block takes can be
known in advance. Two passes at 2 samples/cycle give a mean rate of
1 residual sample per cycle. At 600 MHz that is the order of what 4K 4:2:2
video at 30 frames per second needs (see "Throughput" below).

## Data flow of one block

`vvc_itr_top` runs one W x H block (W, H in {4, 8, 16, 32, 64}) in up to
three phases. Each phase starts only when the previous one has written all
of its results.

1. **Load.** Quantised levels enter two per cycle, as horizontal pairs
   (row r, columns c and c+1, c even). Each pair goes out on
   `iq_level0`/`iq_level1` to an inverse quantiser outside the design. The
   returned coefficients (`iq_coef0`/`iq_coef1`, 18 bits each) are written
   to the input memory as one row pair.
2. **LFNST phase** (only for VVC blocks with `LFNST_idx` != 0 and DCT-II in
   both directions):
   * The top-left 4x4 coefficients are read as four 2x2 tiles.
   * They are fed to the LFNST core in up-right diagonal order, two per
     cycle: 8 inputs for 4x4 and 8x8 blocks, 16 otherwise.
   * The 16 outputs (4xN and Nx4 blocks) or 48 outputs (larger blocks) are
     written back in row-major order. The 16 outputs fill the top-left 4x4.
     The 48 outputs fill the top-left 8x8 minus its bottom-right 4x4.
3. **Vertical pass.** Each of the W columns is one line of length H. It goes
   through the bypass delay line and the MTS core. The results (clipped to
   16 bits) go to the second half of the input memory, which serves as the
   transpose memory.
4. **Horizontal pass.** Each of the H rows of the intermediate block is one
   line of length W, with the final rounding. The 11-bit residuals go to the
   output memory.

`done` pulses when the last residual pair is written. Output words are
addressed `{bank, row, col/2}`. Blocks alternate between two output banks,
so one block can be read while the next is being computed.

## The 1-D MTS core (`mts_1d`, `mts_rom`)

A line of N coefficients enters in N/2 cycles. Each cycle, the 32
multipliers multiply the two input samples by a 256-bit coefficient row
(32 x 8 bits) read from `mts_rom`. The products are accumulated in 64
accumulators. Which products go where depends on the line:

| line | input per cycle | multiplier use |
|---|---|---|
| N <= 16, any kernel | Y[2c], Y[2c+1] | m(2n) and m(2n+1) both add into X[n]: a direct matrix product using 2N multipliers |
| DCT-II, 32 points | Y[2c], Y[2c+1] | even inputs build the even half E[n] and odd inputs the odd half O[n] of one butterfly level (16 + 16 multipliers) |
| DCT-II, 64 points | Y[c], c < 32 | zeroing: only 32 coefficients can be non-zero. Even c adds into E[n], odd c into O[n], n < 32 |
| DST-VII / DCT-VIII, 32 points | Y[c], c < 16 | zeroing: m(j) adds into X[j] |

For the butterfly lines, the outputs are X[n] = E[n] + O[n] and
X[N-1-n] = E[n] - O[n].

Because of zeroing, every line takes N/2 input cycles and produces N/2
output pairs. The core can therefore accept lines back to back at a steady
2 samples/cycle.

DCT-VIII is not stored. It is computed with the DST-VII rows:

1. The odd input coefficients change sign before the multipliers.
2. The output vector is reversed.

This is the identity DCT8 = Λ·DST7ᵀ·Γ.

**Rounding.** The vertical pass rounds by 7 bits and clips to 16 bits. The
horizontal pass rounds by 20 − BitDepth = 10 bits (BitDepth = 10) and clips
to 11 bits. Both are the VVC rules.

**Fixed latency with a ring of time slots.** A short line finishes its
accumulation sooner than a long one. Sent straight out, a short line that
follows a long line would overtake it or collide with its output. Instead,
each finished line writes its output pairs into a ring of 64 slots, one
slot per future clock cycle. Pair k of a line whose first input came at
cycle t is written to slot t + L2 + k. A free-running counter reads out one
slot per cycle and clears it. With L2 = `MTS_LAT` = 36, every line leaves
exactly 36 cycles after its first input, whatever its size and whatever came
before it.

**ROM rows.** The ROM holds one row per input cycle of every kernel: 92 rows
of 256 bits, computed at elaboration from the VVC integer kernels.
`vvc_tr_pkg` builds the DCT-II entries from the 64-point unique magnitudes by
folding the angle k(2n+1)·64/N (mod 256). The DST-VII entries come from each
size's N unique magnitudes, with the angle (2i+1)(j+1) folded modulo
2(2N+1).

## The inverse LFNST core (`lfnst_core`)

A `start` pulse opens an input window of nOut/2 cycles: 8 cycles for 16
outputs, 24 cycles for 48 outputs. The input vector arrives as pairs, at any
rate, within that window.

A complete vector waits in a 4-entry queue. Its compute slot opens a fixed
25 cycles after its own start pulse. During the slot, for k = 0 .. nOut/2−1:

1. One 256-bit kernel row is read.
2. 16 multipliers compute z·T[.][2k] and the other 16 compute z·T[.][2k+1].
3. Two 16-input adder trees give y[2k] and y[2k+1].
4. Each result is rounded by 7 bits and clipped to 16 bits.

Compute slots of successive vectors never overlap, even when a 16-output
block follows a 48-output one. The first output pair appears L1 =
`LFNST_LAT` = 30 cycles after `start`, which is the latency of the
48-output case.

The kernel ROM has 256 rows of 256 bits and sits outside the module.

* Address: kernel·32 + (nOut == 48 ? 8 + k : k), with kernel =
  2·set + (idx − 1).
* Lane 16h + i holds T[i][2k + h].

## Bypass and control units (`lfnst_bypass`, `ctrl_unit1`, `ctrl_unit2`, `vvc_tr_core`)

`vvc_tr_core` wires together the control units, the LFNST core, the bypass
and the MTS core. It keeps the interface names of the original transform
processor (`input_enable`, `tr_src_in`, `MTS_type`, `MTS_dir`, `LFNST_idx`,
`MTS_out_inter`, `MTS_out_fin`, `LFNST_out`, ...).

* **Control unit 1** sets `sel1` for DCT-II lines of the vertical pass with
  a non-zero LFNST index. These go to the LFNST. It sets `sel2` for
  everything else, which goes to the bypass.
* **The bypass** is a register delay line of L1 stages. Bypassed lines
  therefore reach the MTS with the LFNST's latency.
* **Control unit 2** sets `sel3` (DCT-II) or `sel4` (DST-VII / DCT-VIII)
  from the kernel type. It also marks the horizontal pass as the final one.

A line entering the core leaves the MTS L1 + L2 = 66 cycles after its first
pair.

With `AVC_VVC` = 0 the core uses only DCT-II and never the LFNST. This is
the kernel subset of the earlier standards.

## Memories and their layout (`input_mem`, `output_mem`)

**Input memory.** It has 2048 words of 4 × 18 bits, which is the capacity
of 512 × 288 bits. Each word holds a 2x2 tile of samples, with lane
{row[0], col[0]}. Word address = {area, row/2, col/2}. Area 0 holds the
coefficients and area 1 the intermediate block. Both access patterns hit a
single word:

* A column pair (rows 2k and 2k+1 of one column) is in one word.
* A row pair (columns 2c and 2c+1 of one row) is in one word.

A 4-bit lane mask writes the two samples of a pair.

**Output memory.** It has 4096 words of 2 × 11 bits, which is the capacity
of 512 × 176 bits, arranged as two banks of one 64x64 block.

Both memories have one read and one write port, with a registered read.

## Timing of the top level

For a W x H block without LFNST, from `start` to `done` takes:

    W·H + 2·(L1 + L2) + 5  =  W·H + 137 cycles

With LFNST, add 6 + L1 + nOut/2 cycles (44 or 60).

The end-to-end testbench checks this count for every block it runs. It does
not depend on the kernel types.

## Throughput

Within a pass the core takes 2 samples/cycle without stalls. The two passes
of one block are not overlapped, so each block pays a fixed overhead of
137 cycles. At 600 MHz:

| blocks | samples/cycle | M samples/s | 4K 4:2:2 30 fps needs 497.7 |
|---|---|---|---|
| 64x64 | 0.968 | 580.6 | yes |
| 32x32 | 0.882 | 529.2 | yes |
| 16x16 | 0.651 | 390.8 | no |
| 4x4 | 0.105 | 62.7 | no |

`tb/tb_ctu422_workload.sv` runs three 64x64 coding tree units in 4:2:2
format through the design and reports their cycle counts. The budget at
600 MHz and 30 frames/s is 9803 cycles per unit (60 × 34 units per 4K
frame).

| CTU split | transform cycles | frame rate |
|---|---|---|
| one 64x64 luma block + two 32x64 chroma blocks | 8603 | 34.2 fps |
| 32x32 blocks | 9408 | 31.3 fps |
| 16x16 blocks | 12576 | 23.4 fps |

These counts leave out loading the levels, which takes one cycle per pair
of levels and is not overlapped with the transform.

The 1 sample/cycle of the original design is reached only for large blocks.
Overlapping the horizontal pass of one block with the vertical pass of the
next would remove most of the overhead. That would need a second transpose
area and is not done here.

## What lies outside, and how this design departs from the original

* **LFNST kernel ROM.** The trained LFNST kernels of the standard are
  needed but not included. The top brings the ROM port out
  (`lfnst_rom_en`, `lfnst_rom_addr`, `lfnst_rom_data`). The testbenches use
  a model with synthetic values (`tb/lfnst_rom_model.sv`).
* **Inverse quantiser.** It is not included. Its ports are `iq_level0/1` and
  `iq_coef0/1`, and the testbench models it as coef = 2·level.
* **AVC's own integer transforms** are not implemented. `AVC_VVC` only
  restricts the kernels to DCT-II.
* **The LFNST output** is written back to the input memory and then passed
  through the bypass in the vertical pass, rather than streamed straight into
  the MTS. Its samples belong to several columns, so they have to be
  reordered anyway.
* **LFNST placement.** Only the non-transposed placement of the LFNST
  output is done, and the LFNST position inputs are not used.
* **DCT-VIII** follows the Λ·DST7ᵀ·Γ identity (sign change at the input,
  reversal at the output). A block-diagram reading that puts the reversal
  first would not give the VVC matrix.
* **Choices of this design:** the ROM layout (92 rows rather than 68), the
  latencies L1 = 30 and L2 = 36, the memory organisation and the per-block
  sequencing.

## Files and simulation

| file | contents |
|---|---|
| `rtl/vvc_tr_pkg.sv` | types, widths, latencies, kernel functions |
| `rtl/mts_rom.sv`, `rtl/mts_1d.sv` | 1-D MTS core and its coefficient ROM |
| `rtl/lfnst_core.sv` | inverse LFNST core |
| `rtl/lfnst_bypass.sv`, `rtl/ctrl_unit1.sv`, `rtl/ctrl_unit2.sv` | bypass and control units |
| `rtl/vvc_tr_core.sv` | LFNST + bypass + MTS processor |
| `rtl/input_mem.sv`, `rtl/output_mem.sv` | memories |
| `rtl/vvc_itr_top.sv` | top level with the block sequencer |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_vvc_itr_top` runs the whole design at its default sizes |
| `tb/tb_ctu422_workload.sv` | 4:2:2 coding-tree-unit workload with cycle counts |
| `tb/lfnst_rom_model.sv` | stand-in LFNST kernel ROM with synthetic values |

Assertions in the RTL check the usage rules:

* `mts_1d` accepts a new line only after the previous one has entered
  completely.
* `lfnst_core` accepts a start only when the previous input window has
  closed.
* `vvc_itr_top` accepts a load or a start only while idle.

Simulate with `--assert` so that these checks run.

Every testbench prints `TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert -Wno-WIDTH rtl/vvc_tr_pkg.sv rtl/mts_rom.sv \
      rtl/mts_1d.sv rtl/lfnst_core.sv rtl/lfnst_bypass.sv rtl/ctrl_unit1.sv \
      rtl/ctrl_unit2.sv rtl/vvc_tr_core.sv rtl/input_mem.sv rtl/output_mem.sv \
      rtl/vvc_itr_top.sv tb/lfnst_rom_model.sv tb/tb_vvc_itr_top.sv \
      --top-module tb_vvc_itr_top -o sim && obj_dir/sim

The end-to-end test runs:

* every size pair with DCT-II;
* DST-VII / DCT-VIII pairs up to 32 points;
* all LFNST classes, sets and indices;
* HEVC/AVC-mode blocks;
* full-amplitude blocks and random blocks.

It compares every residual with a direct matrix-product model. It also
counts that each mechanism occurs at least once: LFNST phase, bypass,
zeroing, DST-VII, DCT-VIII, HEVC/AVC mode, and a change of line size between
passes.
