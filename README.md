# Tensor Manipulation Unit (TMU) in SystemVerilog

Neural-network accelerators spend a surprising share of their time on operators that
compute almost nothing: Transpose, Rot90, Upsample, PixelShuffle, channel concatenation
(Route) and splitting, RGB-to-16-channel rearrangement, resizing, picking confident
bounding boxes. They are pure data movement. The TMU does them near memory: it streams
a tensor from DRAM through a small engine and writes the transformed tensor back, 16
bytes (one 128-bit bus beat) per cycle, with no CPU computing addresses.

The engine rests on two ideas:

* **One execution model for all operators.** Every operator runs through the same stage
  sequence, like a small RISC pipeline: fetch an instruction, decode it, load a segment of
  the tensor, transform it, store it, and branch to the next segment or instruction.
  Operators differ only in which transform stage they use and in the numbers in their
  instruction.
* **Addresses as an affine map.** A coarse-grained operator (one that moves whole 16-byte
  channel blocks) is described by a 3x3 matrix `A` and a vector `B`. Each input beat's
  position `(x_i, y_i, c_i)` is mapped to an output position, and from that to a byte
  address. Transpose, Rot90, Upsample, Route and Split differ only in `A` and `B`.
  Byte-level (fine-grained) operators go through a masking engine instead.

This RTL holds a complete TMU core and a two-core subsystem that shares one memory port.
It is written in synthesizable SystemVerilog-2017, and each block has a self-checking
testbench.

## Structure

```
tmu_system                       two cores + memory-port arbiter (the top)
 ├─ tmu_core  (x2)                one TMU
 │   ├─ tmu_inst_buf              instruction memory, written by the host
 │   ├─ tmu_fetch_decode          program counter, opcode -> dataflow class
 │   ├─ tmu_cfg_regs              fields of the running instruction, beat counts
 │   ├─ tmu_fsm                   execution-model state machine
 │   ├─ tmu_tensor_buf            segment buffer, 1 write / 2 read ports
 │   ├─ tmu_rme                   Reconfigurable Masking Engine (fine-grained)
 │   │   ├─ tmu_seg_mask_cnt      which loaded beats are kept
 │   │   ├─ tmu_cal_unit (x3)     max / min / sum / average over a window
 │   │   └─ tmu_assembler         byte mask -> packed output stream
 │   ├─ tmu_elem_unit             16-lane int8 Add / Sub / Mul
 │   ├─ tmu_addr_gen              3-stage affine address pipeline
 │   └─ tmu_commit_buf            FIFO of (address, strobe, data) output beats
 └─ tmu_mem_arb                   round-robin sharing of the DMA port
tmu_pkg                           shared types: instruction word, enums, widths
```

The TPU, the DMA engine, the DRAM controller and DRAM, and the SoC host are outside the
design. The top brings their connections out as ports:

* a read channel with in-order responses;
* a posted write channel with byte strobes;
* the TPU forwarding streams;
* instruction load, `start` and `done`.

`tb/tb_dram_model.sv` is a behavioural DRAM used by the testbenches.

## The instruction

One instruction (`inst_t` in `rtl/tmu_pkg.sv`, held in the instruction buffer) describes
one operator applied to one tensor. A tensor is `wi x hi` positions of `cb` channel blocks.
Each channel block is one 16-byte beat, so the tensor is `wi*hi*cb` beats, stored
contiguously from `src0_base`. The beats are numbered with `c_i` fastest, then `x_i`, then
`y_i`.

| fields | used by | meaning |
|---|---|---|
| `op` | all | operator; the decoder maps it to a class: assemble, evaluate, element-wise, coarse, halt |
| `src0_base`, `src1_base`, `dst_base` | all | byte addresses; `src1` only for element-wise |
| `src_fwd`, `dst_fwd` | all | read from the TPU forwarding input / write to the forwarding output instead of DRAM |
| `wi`, `hi`, `cb` | all | tensor size |
| `seg_len` | all | beats per segment; 0 = as many as the tensor buffer holds |
| `a[3][3]`, `a_shr[3]`, `b[3]`, `c_stride` | address generator | the affine map (below) |
| `byte_mask`, `grp_in`, `grp_out` | assemble, filter | which bytes are kept; group / zero-pad rule |
| `byte_dest[16]`, `cal_op[3]`, `avg_shift` | evaluate | byte lane -> calculation unit (3 = none); the unit's operation |
| `ev_mode`, `cond_unit`, `threshold` | evaluate | reduce, or filter windows on `result[cond_unit] > threshold` |
| `seg_period`, `seg_keep` | fine-grained load | keep the first `seg_keep` beats of every `seg_period` |
| `eop`, `mul_shift` | element-wise | Add / Sub / Mul, with the product shifted right before saturation |

A program is a list of instructions ending with `OP_HALT`. The host writes it through
`inst_wr_*` and pulses `start`. `done` rises when the halt is decoded. `tb/tb_tmu_pkg.sv`
has builder functions for the common operators and shows how the fields are filled in.

## Execution model: the state machine

`tmu_fsm` has one state per stage:

```
IDLE -> FETCH -> DECODE -> LD_MEM -> { ASSEMBLE | EVALUATE | ELEM } -> ADDR_GEN -> ST_MEM -> UPDATE_INDEX
                   |                \____________ coarse ____________/                        |     |
                   +-- halt -> IDLE                                       more segments <-----+     +-> FETCH
```

* **LD_MEM** reads one segment into the tensor buffer.
  * Element-wise instructions read the same number of beats from both operands, one into
    each half of the buffer.
  * Fine-grained instructions keep only the beats that the segment masking counters accept.
* **The processing state** depends on the class:
  * Coarse-grained instructions go straight to **ADDR_GEN**. There the buffered beats stream
    through the address generator at one beat per cycle.
  * Fine-grained instructions stream through the RME in **ASSEMBLE** or **EVALUATE**.
  * Element-wise instructions stream through the element-wise unit in **ELEM**.
  * Fine-grained and element-wise output also passes through the address generator, so all
    three classes then pass **ADDR_GEN**, where the pipeline drains.
* **ST_MEM** writes the commit buffer out to DRAM or to the forwarding port.
* **UPDATE_INDEX** moves on to the next segment or the next instruction.

One transition is this design's own. An operator's output can be larger than its input:
Rearrange turns 3 bytes into 16, and Upsample writes each beat four times across four
instructions. So the commit buffer can fill while a segment is still streaming. When it
is about to fill (see the credit rule below), the machine enters ST_MEM early. Once the
buffer is empty it returns to the state it left (`ret_state`).

## Address generation

The address generator is a three-stage pipeline. It produces one address per cycle, three
cycles after its input.

1. It multiplies the rows of `A` with the index vector `(x_i, y_i, c_i)`.
2. It sums each row, shifts the row right by `a_shr[r]` and adds `B` to get
   `(x_o, y_o, c_o)`. It also multiplies `x_o` and `y_o` by the channel stride.
3. It adds the base address.

The address is:

```
(x_o, y_o, c_o) = ((A * (x_i, y_i, c_i)) >>> a_shr) + B
addr            = dst_base + (x_o + y_o) * c_stride + c_o * 16
```

`c_stride` is the number of bytes per output pixel, i.e. 16 x the number of output channel
blocks. `y_o` already carries the row pitch through `A` (Transpose has `y_o = w * x_i`).
Examples, as they are used in the testbenches:

| operator | A (rows) | B | notes |
|---|---|---|---|
| copy / Add / Route part k | `[1 0 0; 0 wi 0; 0 0 1]` | `(0, 0, k*cb)` | `c_stride` = output channel blocks x 16 |
| Transpose | `[0 1 0; hi 0 0; 0 0 1]` | 0 | |
| Rot90 | `[0 -1 0; hi 0 0; 0 0 1]` | `(hi-1, 0, 0)` | |
| Upsample by s, sub-pixel (dx,dy) | `[s 0 0; 0 s*s*wi 0; 0 0 1]` | `(dx, dy*s*wi, 0)` | one instruction per (dx,dy) |
| Split, one block per output | `[1 0 0; 0 wi 0; 0 0 K]` | 0 | outputs K beats apart |
| fine-grained output | `[1 0 0; 0 0 0; 0 0 0]` | 0 | `c_stride` = 16: beat k to `dst + 16k` |

Two things here are interpretations:

* **The printed address formula.** The paper's published formula multiplies `x_o` and
  `y_o` by `c_o`. Taken literally, every beat of channel block 0 would land on the base
  address. The formula above reads that factor as the channel stride and adds the channel
  term.
* **Fractions in A.** Factors such as `1/s` and `1/stride` are realised as a per-row right
  shift, so those divisors must be powers of two.

For fine-grained streams the index is simply the number of the output beat.

## The Reconfigurable Masking Engine

The RME handles operators that work below the 16-byte granularity. It has three parts:
the load mask, and two schemes, assemble and evaluate.

**Load mask.** `tmu_seg_mask_cnt` counts the beats arriving during LD_MEM and accepts the
first `seg_keep` of every `seg_period`. Only accepted beats are written to the tensor
buffer. A `seg_period` of 0 accepts every beat.

**Assemble** (`tmu_assembler`, used by Rearrange):

* The bytes selected by `byte_mask` are appended, in lane order, to a 32-byte queue.
* From the queue, groups of `grp_in` bytes move into the assemble register. Each group is
  followed by `grp_out - grp_in` zero bytes.
* The register emits a beat whenever it holds 16 bytes.

With `grp_in = grp_out = 16` the stream is only compacted, for example to keep some
channels. With `grp_in = 3, grp_out = 16`, packed RGB pixels become zero-padded
16-channel pixels. At the end of an instruction a flush sends out the remainder:

* A short last group is sent without padding.
* The final partial beat is sent with a byte strobe.
* A beat written with a strobe leaves the other bytes of that memory beat untouched.

**Evaluate** (three `tmu_cal_unit`s):

* `byte_dest` sends each byte lane to one of three calculation units, or to none.
* Each unit reduces its bytes over a window: maximum, minimum, saturating sum, or sum
  shifted right (average).
* A window is one tensor-buffer segment.

There are two modes:

* **reduce** — at the end of each window, the results of the units that saw data are
  appended to the assembled stream, one byte per unit. This serves max/min retrieval and
  average-based down-scaling.
* **filter** — the window is evaluated first. If `result[cond_unit] > threshold`, the
  window is read a second time from the tensor buffer and its `byte_mask` bytes are
  committed. Otherwise nothing is written. This is Bboxcal: each box is one window
  (whole beats) and its confidence byte is routed to the condition unit.

## Element-wise unit

`tmu_elem_unit` is combinational, with 16 signed int8 lanes and saturation. The operations
are Add, Sub, and Mul followed by `>>> mul_shift`. During ELEM, both read ports of the
tensor buffer are read in the same cycle: the operand-0 half and the operand-1 half. The
result goes to the address generator.

## Commit buffer, credit and store

The address generator's outputs enter `tmu_commit_buf`, a 16-entry FIFO of address,
strobe and data. A beat may enter the address pipeline only if the FIFO is sure to have
room for it:

```
entries + beats_in_pipeline + 1 <= depth
```

When that fails while a segment is streaming, the FSM takes the early store. In ST_MEM the
FIFO drains at one beat per cycle, either to the write channel or, with `dst_fwd`, to the
forwarding output. Every beat keeps the address it was given, so the receiver can place
it.

## Output forwarding

With `src_fwd` set, a core takes its input beats from the TPU's forwarding stream
(`fwd_in_*`) instead of issuing DRAM reads. The TPU can then hand partial results
straight to the TMU. With `dst_fwd` set, the committed beats leave on `fwd_out_*` instead
of the write channel. Both can be combined.

## Two cores and the memory port

`tmu_system` places two cores side by side, each with its own tensor buffer. Within a
core, the three phases of a segment (load, transform, store) run one after another. With
two cores, one core can load while the other transforms or stores. This is double
buffering at the system level.

`tmu_mem_arb` shares the single read channel and the single write channel:

* one grant per channel per cycle, with combinational `valid`/`ready`;
* a read request's id selects the core that receives the in-order response;
* the grant is sticky round-robin: the core served last keeps the channel while it keeps
  requesting, and the channel then passes to the next requester in order.

The sticky grant matters. If grants alternate beat by beat, two cores started together
load in lockstep, each at half rate, and then transform in lockstep: nothing overlaps.
With whole-burst grants, one core finishes its segment load while the other waits, so
the two fall into alternation by themselves. No core waits longer than one segment load
of the other.

## Timing and throughput

The memory interface moves one 16-byte beat per cycle. At 300 MHz that is 4.8 GB/s.
With a memory that does not stall, each 32-beat segment of a coarse-grained operator
takes:

* 39 cycles to load (32 beats plus the 6-cycle model latency and one cycle of issue);
* 36 cycles through the address generator (32 plus pipeline fill and drain);
* 35 cycles to store.

`tb_tmu_core` checks these bounds. With the default 64-beat segments, one core moves a
coarse-grained tensor at 3.3 cycles per beat, and element-wise Add at 4.5. A 448x448x64
Transpose (802,816 beats) takes 2.65 M cycles on one core. Split by rows over both cores
it takes 1.40 M cycles, 0.53 of the one-core time (`tb_tmu_prefetch`).

## Sizes and parameters

| parameter | default | where |
|---|---|---|
| `BUS_BYTES` | 16 | 128-bit bus (`tmu_pkg`) |
| `N_TMU` | 2 | cores in `tmu_system` |
| `N_CAL` | 3 | calculation units |
| `INST_DEPTH` | 16 | instructions per core (assumed) |
| `BUF_DEPTH` | 64 | tensor-buffer beats per core, 1 KiB (assumed) |
| `COMMIT_DEPTH` | 16 | commit FIFO entries (assumed) |
| `IDX_W` | 24 | width of `wi`, `hi`, `cb` |
| `COEF_W`, `OFS_W` | 16, 32 | entries of `A` and `B` |

With these widths an operator such as Transpose of 448x448x64 int8 fits: 802,816 beats,
coefficients up to 448, and 12.8 MB of addresses. Tensors live in DRAM, so the tensor
size is limited only by the counters, not by on-chip memory.

## Where this design departs from, or goes beyond, the published description

* **Own choices, where the source is silent:**
  * the instruction format and opcodes;
  * the segment rules and the beat order (`c` fastest);
  * the load-mask rule (period/keep);
  * the group/zero-pad rule of the assembler;
  * a window being one segment;
  * the two-pass filter;
  * the early store and the credit rule;
  * the memory handshakes;
  * the arbiter;
  * all buffer depths.
* **The address formula** is interpreted as described above. Divisors in `A` must be
  powers of two.
* **Two published matrices are adjusted.** For Transpose and Rot90 the published row
  pitch is the input width `w_i`. Here it is the output row length, which is `hi`; the
  two are equal for square maps. The published Rot90 offset `w_i` is taken as `hi - 1`,
  so that output columns run from 0 to `hi - 1`.
* **Operators not covered by a single affine map plus a contiguous load are not
  supported as the source sizes them:**
  * Resize by 2x2 averaging: a window cannot span two image rows.
  * Split of 64 channels into 2x32: each output needs two channel blocks of every pixel.
  * Img2col borders: out-of-range window positions are not clipped.
  * Bboxcal on packed 85-byte records: boxes must start on a beat boundary.
  * PixelShuffle and PixelUnshuffle: the generator computes the published matrices.
    The usual layout moves `c mod s^2` into the sub-pixel position, or `x mod s, y mod s`
    into the channel. Neither term is affine, so one instruction does not produce that
    layout.
* **Upsample and Route** take several instructions: one per sub-pixel offset, or one per
  input tensor.
* **The SoC-level instruction fetch and FSM** that issue operators to the TMU are not
  designed. The host loads each core's program directly.

## Simulation

Every testbench is self-checking. It prints `TB_RESULT checks=<n> failures=<n>` and has
a watchdog. With Verilator 5, for example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/tmu_pkg.sv tb/tb_tmu_pkg.sv \
          tb/tb_tmu_system.sv --top-module tb_tmu_system -o sim
./obj_dir/sim
```

| testbench | what it shows |
|---|---|
| `tb_tmu_system` | Both cores at default parameters, sharing a stalling DRAM model. Core 0 runs Transpose, Rearrange (RGB -> 16 channels), Bboxcal and a forwarding-in/forwarding-out copy. Core 1 runs Add, a max/min/average reduction with the load mask, Rot90 and Upsample x2. Every output byte is compared with its definition. It counts early stores, port conflicts, back-pressure, dropped beats, accepted/rejected boxes, segment branches, forwarding, load/compute overlap and each dataflow class, and fails if one never happens. |
| `tb_tmu_workloads` | One core at default parameters, at full operator sizes: Transpose, Rot90, Route, Add and Upsample x2 of 448x448x64 tensors, and Rearrange of a 448x448 RGB image. It checks every output beat and the cycles per beat. It takes about 30 s. |
| `tb_tmu_prefetch` | The 448x448x64 Transpose on one core, then split over both cores. It checks both results and a speed-up of at least 1/0.65. |
| `tb_tmu_core` | One core: Split, Route (concatenation), element-wise Mul; one-beat-per-cycle load, address generation and store. |
| `tb_tmu_fsm` | The state machine against a reference model under random conditions; all states, the early store and halt. |
| `tb_tmu_rme` | Assemble, evaluate/reduce, evaluate/filter (pass and drop), the load mask. |
| `tb_tmu_addr_gen` | Random `A`/`B`/shift against an integer reference; the Transpose map; the 3-cycle latency. |
| `tb_tmu_assembler` | Random masks and group settings, with output back-pressure. |
| other `tb_tmu_*` | One per remaining block: instruction buffer, fetch/decode, configuration registers, tensor buffer, load mask counter, calculation unit, element-wise unit, commit FIFO, arbiter. |

The simulator these tests were written for is two-state. All state is reset, and the
testbenches initialise everything they read.
