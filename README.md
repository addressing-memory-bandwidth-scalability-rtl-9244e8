# Provet: a vector core fed by an ultra-wide, shallow SRAM

Most of the energy in a neural-network accelerator goes into moving data, not into
arithmetic. Provet attacks this with its memory hierarchy rather than with data
reuse inside a processing array:

* The global on-chip memory is an SRAM whose word is very wide (4096 bits) and whose
  depth is small (at most a few tens of words). Per bit delivered, a wide and
  shallow array is cheap to read, because each access charges short bit lines. A
  single access delivers a large amount of data.
* Between the SRAM and the compute sits a **very wide register (VWR)**. It is a
  single 4096-bit word with asymmetric ports:
  * the memory side reads and writes the whole word at once;
  * each SIMD unit reads and writes only the 512-bit slice physically above it.
  
  One SRAM access can therefore feed a 512-bit SIMD unit for eight operations.
  There are two VWRs, A and B, so one can be filled while the other is used.
* The wiring is kept short and regular. A SIMD unit only sees the VWR slices in
  its own pitch. Data that is not aligned is moved by two cheap shufflers:
  * a **tile shuffler** between SRAM and VWR moves 512-bit blocks;
  * a **VFU shuffler** inside each SIMD unit moves single operands over a short
    range.
  
  Neither is a full crossbar.
* There is no central controller driving control wires across 4096 bits of
  datapath. Each component replays its own control words from a small local
  **loop buffer**.

This repository contains synthesizable SystemVerilog for that core:
* the SRAM;
* the tile shuffler;
* the two VWRs;
* the SIMD unit (its VFU, registers R1–R4 and the VFU shuffler);
* the loop buffers;
* a top level that wires them together.

It also contains self-checking testbenches, including a complete 5×5 convolution
run end to end at the default size.

## Block map

```
              host port (ext_*)                      loop buffers (lb_*, start)
                    |                                   |            |
   +----------------v----------------+          memory-side LB   one LB per SIMD unit
   | wide_sram  32 words x 4096 bit  |               |                 |
   +----------------+----------------+               v                 |
                    | RLB / WLB (full word)    mem_ctrl_t              |
   +----------------v----------------+                                 |
   | tile_shuffler  8 blocks x 512 b | <-- GLMV (VWR -> VWR)           |
   +--------+----------------+-------+                                 |
            |                |                                         |
   +--------v-------+ +------v---------+                               |
   | VWR A  4096 b  | | VWR B  4096 b  |   slices 0..7, 512 b each     |
   +--------+-------+ +------+---------+                               |
            | pitch-aligned slices (VMV, operand b, write-back)        v
   +--------v----------------v------------------------------------ dpu_ctrl_t
   | dpu: R1 R2 R3 R4 | vfu (64 x 8-bit lanes) | vfu_shuffler (+-4 operands, PERM) |
   +-------------------------------------------------------------------------------+
```

| Module | What it is |
|---|---|
| `provet_pkg` | sizes, VFU mode and multiplexer encodings, the two control-word structs |
| `wide_sram` | the global memory, with a one-cycle read and a block-masked write |
| `tile_shuffler` | rotates a wide word by whole 512-bit blocks |
| `vwr` | a single-word register with one full-width port and narrow slice write ports |
| `vfu` | combinational SIMD ALU implementing the eleven VFUX modes |
| `vfu_shuffler` | operand-granular rotation (±RANGE) or arbitrary permutation within one SIMD word |
| `dpu` | one SIMD unit: the VFU, R1–R4, the VFU shuffler and the multiplexers between them |
| `loop_buffer` | a control-word store that replays a loop body a given number of times |
| `provet_top` | the core, with `NUM_DPU` SIMD units, each with its own loop buffer |

## Control: one control word per component per cycle

Instructions are not decoded anywhere. An instruction in the architecture is a
bundle of *control actions*: set a multiplexer, enable a register, select a VFU
mode. Here each component receives those actions directly as a control word,
every cycle, from its own loop buffer.

There are two word types, both defined in `provet_pkg`. In both, the all-zero word
is a no-operation. That is what an idle loop buffer outputs.

**`mem_ctrl_t`** drives the memory side:

| field | meaning |
|---|---|
| `op` | `MEM_RLB` (SRAM→VWR), `MEM_WLB` (VWR→SRAM), `MEM_GLMV` (VWR→VWR) or `MEM_NOP` |
| `addr` | SRAM word |
| `src_vwr` | VWR read by WLB or GLMV (0 = A, 1 = B) |
| `dst_vwr` | VWR written by RLB or GLMV |
| `step` | signed tile-shuffler rotation, in 512-bit blocks |
| `mask` | which blocks (slices) of the destination are written |

Every memory-side transfer passes through the tile shuffler; a step of 0 is a plain
copy. The mask lets a transfer replace only some slices. For example, the
convolution below refills one image row while the other rows stay in place.

**`dpu_ctrl_t`** drives one SIMD unit. All of its fields act in the same cycle:

| group | fields | action |
|---|---|---|
| VFU | `op`, `b_sel`, `b_vwr`, `b_slice` | operand a is always R1. Operand b is R4 or one VWR slice. The accumulator of the accumulating modes is R4 |
| VMV | `ld_we[3:0]`, `ld_vwr`, `ld_slice`, `ld_bcast`, `ld_lane` | loads R1..R4 from a VWR slice, either whole or with one operand broadcast to every lane |
| R2/R3 | `r2_we`, `r3_we` | store the VFU result |
| shuffler | `sh_src`, `sh_mode`, `sh_step` | input is the VFU result, R2, R3 or the operand-b VWR slice (bypassing the VFU). Rotates by `sh_step`, or permutes with R3 as the source list |
| R4 | `r4_we`, `r4_src` | takes the VFU result or the shuffler output |
| write-back | `wb_we`, `wb_src`, `wb_vwr`, `wb_slice` | writes the VFU result or the shuffler output into one slice of VWR A or B |

Registers are read at their old values. So one word can load the next weight into
R1 while the VFU still multiplies with the current one.

When a result and a VMV load target the same register, the result wins. An
assertion reports the clash.

The ISA names map onto these fields as follows:

| Instruction | Fields |
|---|---|
| RLB, WLB, GLMV | `mem_ctrl_t.op` |
| VMV | the `ld_*` fields |
| RMV | shuffler source R2 or R3, plus write-back of the shuffler output |
| PERM | `sh_mode = SH_PERM` |
| VFUX | `op` |

### VFU modes

Operands are 8-bit two's-complement integers. Results wrap modulo 256.

| mode | result per lane |
|---|---|
| MUL / ADD / MAX | a·b, a+b, max(a,b) |
| MAC / ADDACC / MAXACC | R4 + a·b, R4 + (a+b), max(R4, a, b) |
| CLIP | a clamped to [−\|b\|, \|b\|] |
| SHIFT | a << b for b ≥ 0, otherwise a >>> −b |
| RELU | max(a, 0) |
| SIGMOID | clamp(a/4 + 1/2, 0, 1), with a read as Q4.4 |
| TANH | clamp(a, −1, 1), with a read as Q4.4 |

### Loop buffers

A loop buffer holds `LB_DEPTH` (32) words. The host writes them through
`lb_wr_*`:
* `lb_wr_sel` 0 selects the memory side;
* `lb_wr_sel` 1+d selects SIMD unit d.

A `start` pulse launches every buffer of the core on the same body `[loop_first,
loop_last]`, repeated `loop_count` times (a count of 0 runs the body once).
* The first word takes effect in the cycle after `start`.
* `busy` is high while words are being issued.
* `done` pulses for one cycle after the last word.

All buffers share the start signal and the bounds, so they stay in lockstep. Each
buffer can still hold completely different words. Different SIMD units can thus
run different operations at the same time.

The host may rewrite entries while a body runs or between runs. That is how
row-dependent addresses are updated.

## Timing of the memory side

| transfer | cycle of issue | following cycle |
|---|---|---|
| RLB | the SRAM is read | the word passes the tile shuffler and is written into the VWR (masked) |
| WLB | VWR → shuffler → SRAM written, masked | — |
| GLMV | VWR → shuffler → VWR written, masked | — |

The tile shuffler is shared. So an assertion forbids a WLB or GLMV in the cycle
right after an RLB; an RLB may follow an RLB.

The host port `ext_*` reaches the SRAM directly and has priority over the core. It
must only be used while the core is idle, and an assertion checks this. Host reads
also return their data one cycle later, on `sram_rdata`.

The VWR wide port and the SIMD-unit write-back can target the same VWR in one cycle.
The write-back is applied last. An assertion flags overlapping slices.

## Worked example: a sliding convolution

The mapping below is the one the architecture was designed around. It is the
clearest way to see why the VWR and the two shufflers exist. The testbenches run
it for a 5×5 kernel:
* at 16 lanes, 4 slices and a 16×16 image (`tb_provet_top`);
* at the full default size: 64 lanes, 8 slices and a 64-row image
  (`tb_provet_full`).

**Layout.**
* SRAM: image row r sits in block r mod 8 of word r/8. The kernel fills one word.
  Output row k is written to block k mod 8 of an output word.
* VWR A holds the 8 image rows the current output row needs.
* VWR B holds the kernel, one weight per operand. Its last slice collects the
  output row.

**Output-stationary inner loop.** The partial sums of one output row stay in R4
for the whole row. For each kernel pixel (j, i):

1. Weight (j, i) is broadcast from VWR B into all lanes of R1. This is a VMV
   broadcast, issued one cycle ahead.
2. The VFU computes R4 + R1 · (VWR A slice j). Slice j is image row k+j. The first
   pixel uses a plain multiply.
3. The sum passes through the VFU shuffler back into R4:
   * rotated by +1 operand within a kernel row;
   * rotated by −(K−1) = −4 at the end of a kernel row, which returns the partial
     sums to their home position.

The shift of R4 is what makes the kernel slide along the image row. No image data
is moved at all.

After the 25th pixel, lane x of R4 holds output (k, x) for x = 0 … W−K. The same
word also writes the sum into VWR B's last slice.

**Per-row schedule** (one loop-buffer run, K·K+3 = 28 cycles):

| cycle | SIMD unit | memory side |
|---|---|---|
| 0 | R1 ← weight 0 | |
| 1 … 25 | MUL / MAC and rotate into R4; R1 ← next weight | cycle 5: RLB image row k+8 from its SRAM block into slice 0 of VWR A. Slice 0 holds row k, which is no longer needed after cycle 5 |
| 26 | | WLB: VWR B's last slice → output block in SRAM |
| 27 | | GLMV: rotate VWR A by one block, so slice j holds row k+1+j |

The SIMD unit's loop buffer is written once. Between rows, the host only rewrites
the two memory-side entries that carry row-dependent SRAM addresses.

Each output row therefore costs 28 cycles, 25 of them VFU operations (89 %). It
takes one SRAM read and one SRAM write. Against that, the VFU makes 25 accesses to
VWR A and VWR B. This is the read asymmetry the design is built on.

The testbenches check:
* every output operand against a convolution computed independently in the
  testbench;
* the cycle count of every run;
* that each mechanism really occurred at least once, using counters: RLB, WLB,
  GLMV, broadcast VMV, MUL, MAC, +1 and −4 rotations, VWR write-back, ReLU, RMV,
  the VFU-bypassing shuffle and loop-buffer reload.

## Parameters

Defaults describe the main configuration. The top can be scaled through its
parameters.

| parameter | default | meaning |
|---|---|---|
| `LANES` | 64 | operands per SIMD unit (8 bits each, so 512 bits) |
| `OP_W` | 8 | operand width |
| `SLICES` | 8 | SIMD-wide slices per VWR and SRAM word (4096 bits) |
| `SRAM_DEPTH` | 32 | SRAM words (the architecture asks for 1 to 32) |
| `NUM_DPU` | 1 | SIMD units. Each sees `SLICES/NUM_DPU` slices, and the ratio must divide evenly |
| `RANGE` | 4 | VFU-shuffler rotation range, in operands. Longer moves take several steps |
| `LB_DEPTH` | 32 | words per loop buffer |

Control-word fields are sized for up to 256 SRAM words, 64 slices and 256 lanes.

## Simulating

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert rtl/provet_pkg.sv rtl/*.sv \
    tb/provet_conv_bench.sv tb/tb_provet_top.sv --top-module tb_provet_top
./obj_dir/Vtb_provet_top
```

`rtl/provet_pkg.sv` goes first. Blocks are tested alone the same way, with the
package, the block's file and `tb/tb_<block>.sv`.

| testbench | what it covers | size |
|---|---|---|
| `tb_wide_sram` | masked writes, read latency and hold, against a reference array | defaults |
| `tb_tile_shuffler` | every rotation step, including negative and out-of-range steps | 8 × 16 bits |
| `tb_vwr` | wide masked writes, two narrow ports, write ordering | 8 × 32 bits |
| `tb_vfu` | all eleven modes on random and corner operands | 8 lanes |
| `tb_vfu_shuffler` | all rotations in and out of range, random permutations | 16 lanes |
| `tb_loop_buffer` | body bounds, repeat count, busy/done timing, writes during a run | 16-bit words |
| `tb_dpu` | broadcast, MAC into R4, shuffling paths, RMV, PERM, write-back | 8 lanes |
| `tb_provet_top` | full convolution, as described above | 16 lanes, 4 slices, 16 rows |
| `tb_provet_full` | the same convolution on the top at its default parameters | 64 lanes, 8 slices, 64 rows (1680 loop cycles) |
| `tb_provet_layers` | the same mapping on the layer shapes of the evaluated networks, one channel plane each: 3×3 kernels on 56, 112, 16 and 9 rows, and a 5×5 kernel on 31 rows | default size |

The simulator used has two-valued logic. Everything the design reads is reset or
written before use, except the SRAM contents, which the host loads.

## Where this RTL departs from the architecture, or fills gaps

The architecture is described at block level. Everything below the following list
is a choice made here, noted in each file's opening comment:

* the ultra-wide SRAM, the 8:1 ratio, the two VWRs;
* the block-granular tile shuffler and the operand-granular short-range VFU
  shuffler;
* R1–R4, with R1 feeding the VFU and b taken from R4 or the VWR;
* the VFU modes;
* per-component loop buffers.

The main choices and differences:

* **Arithmetic.** Integer 8-bit lanes with wrap-around. There are no wider
  accumulators and no saturation. Sigmoid and tanh are piecewise-linear
  approximations in Q4.4. The architecture names these functions but does not
  define a number format.
* **Loop buffers.** A single-level loop with host-written contents and a shared
  start. The real control structure is explicitly left open by the architecture,
  including nesting, how loop buffers are refilled and the BRAN instruction.
* **Not built:**
  * the scalar CALC instruction (its operations are not specified);
  * branches and program sequencing;
  * the off-chip memory interface.
  
  The host port on the SRAM stands in for the off-chip side.
* **Tile shuffler.** Implements block rotation only. The architecture says its
  patterns are chosen per application, and rotation is what the convolution
  mapping needs.
* **PERM.** The permutation list is a SIMD word in R3, holding one source index per
  output operand. The architecture describes it as a list of (source, destination)
  pairs.
* **Convolution inner step.** The architecture's pseudo-code uses a multiply into R2
  followed by an add into R4, and shifts R4 "in place". Here a single MAC is used,
  and the sum reaches R4 through the VFU shuffler. The VFU shuffler's inputs are
  listed as the VFU output, R2, R3 and the VWR, and R4 is not among them.
* **Row-end shift.** The pseudo-code shifts after every one of the 5 kernel columns
  and then shifts back by 4. That leaves R4 one operand off. This RTL follows the
  illustrated sequence instead: shift +1 after the first K−1 columns, then −(K−1)
  after the last.
* **Example counts.** For a 16×16 image and a 5×5 kernel, the illustration's caption
  counts 16 output rows and 400 iterations. A valid convolution has 12 output rows,
  so 300 MAC iterations; that is what the testbench executes. The pseudo-code's
  outer bound, H−K−1 = 10, also disagrees with both.
* **Number of SIMD units.** The default is one 512-bit unit under a 4096-bit VWR, as
  in the detailed architecture drawing. `NUM_DPU` can be raised; each unit then sees
  its own share of the slices.
* **Larger workloads.**
  * Layers whose 64-wide column strip plus output exceed the 32-word SRAM (strided
    first layers such as a 7×7/2 on a 224×224 input, or 11×11/4 on 227×227) need
    row banding with off-chip traffic, which is not modelled.
  * Kernels above 5×5 exceed one 32-entry loop body in this schedule.
  * Strided convolutions are not part of the mapping implemented here.
  
  3×3 and 5×5 stride-1 layers up to 112×112 (in 64-wide strips) fit. `tb_provet_layers` runs one channel plane of each such shape at the default size. Accumulation over input channels is not part of the mapping implemented here.
