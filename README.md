# A compute chip for lensless eye tracking

Eye tracking in AR/VR glasses has to run above 240 frames per second, on
milliwatts, behind a camera thin enough to sit in a spectacle frame. The
i-FlatCam system answers this with a lensless camera (a coded binary mask a
millimetre above a bare image sensor) and a small neural-network processor.
The processor reconstructs an image from the coded measurements and then runs
two MobileNetV2-style networks: an eye detector on a coarse reconstruction that
finds a region of interest (ROI), and a gaze estimator on a full-resolution
reconstruction of just that ROI. Because the eye moves little from frame to
frame, the ROI is usually extrapolated rather than re-detected.

This repository is a SystemVerilog model of that processor at register-transfer
level. Two ideas drive its structure:

* **All weights stay on chip.** Each layer's weights are stored as a low-rank
  product `W = CM x BM`: a tiny 8-bit basis matrix `BM` and a tall coefficient
  matrix `CM` whose entries are signed powers of two and whose rows are pruned
  to zero in a structured way. Only the non-zero rows of `CM` are stored, with
  a 2-bit run-length index per row. A small restore engine per PE line rebuilds
  8-bit weights with shifts and adds.
* **Pruned rows cost neither time nor weight reads.** A pruned row of `CM` is
  a kernel row (CONV) or an input channel (point-wise CONV) whose products
  would all be zero. The PE lines skip it by using the run-length index to pick
  the next useful input row from an input buffer that holds twice as many rows
  as one step consumes.

The block set, memory sizes and bus widths follow the published chip (28 nm,
1.73 mm x 1.73 mm, 512 multipliers, 316 KB of SRAM). Much of the fine
structure was never published: the instruction set, the index rule, number
formats and the timing. Those parts are this design's own. Each file's header
comment says which parts follow the published chip and which do not, and the
last sections of this document list the differences.

## Block diagram

```
host port --> FM GB 0 / FM GB 1  (2 x 50 KB, 512-bit words)
                 | 512b
                 v
              IFM buffer (SWPR) <-- 64 x 2b run-length indexes <-- index SRAM (20 KB)
                 | 64 x 17 x 8b
                 v
weight GB --> 64 restore engines --> 64 interleaved weight buffers
(180 KB)  4b   (shift-and-add)   8b            | 8b per line
                                               v
              PE lines 0..62  +  switchable PE line 63 (argmax)
                 | 64 x 8 x 8b
                 v
              OFM buffer --> 512b --> FM GB 0 / FM GB 1

instruction SRAM (4 KB) --32b--> controller --> every block above
```

| Module | Role |
|---|---|
| `icam_pkg` | sizes, instruction encoding, restore-engine ops, requantisation function |
| `icam_chip` | top level: memories, 64 lanes, host port |
| `controller` | fetches and runs 32-bit instructions |
| `fm_gb` | 50 KB feature-map global buffer, 800 x 512 bit (two instances) |
| `weight_gb` | 180 KB weight global buffer, 5760 x 256 bit (one nibble per lane) |
| `index_sram` | 20 KB run-length index memory, 1280 x 128 bit (2 bits per lane) |
| `instr_sram` | 4 KB instruction memory, 1024 x 32 bit |
| `restore_engine` | rebuilds 8-bit weights from basis and power-of-two coefficients |
| `weight_buffer` | two-bank weight row buffer between restore engine and PE line |
| `ifm_buffer` | sequential-write, parallel-read input row buffer with per-line row selection |
| `pe_line` | 8 MAC PEs doing a 1-D convolution over a 17-pixel window |
| `pe_line_sw` | PE line 63: a `pe_line` plus an argmax comparator tree |
| `ofm_buffer` | gathers the 64 x 8 outputs into eight 512-bit words |

A "lane" is one restore engine, its weight buffer, its PE line and its
run-length index. All 64 lanes receive the same commands in the same cycle.

## The compressed weight format

Take all weights of a layer and cut them into rows of `KW = 3` neighbouring
weights. A 3x3 kernel gives three rows per input channel. A point-wise kernel
gives one row per three input channels. Stack the rows into a tall matrix `W`
with 3 columns and factor it as

```
W  (N x 3)  =  CM (N x RANK)  x  BM (RANK x 3),        RANK = 3
```

`BM` has 8-bit signed entries. Every entry of `CM` is a 4-bit code
`{s, e[2:0]}`, meaning `(s ? -1 : +1) * 2^-e`. The code `4'b1000` is
reserved for zero. A restored weight is therefore

```
w[j] = sat8( sum_r  s_r * (BM[r][j] >>> e_r) )
```

Here `>>>` is an arithmetic shift, which rounds towards minus infinity, and
`sat8` clips to [-128, 127]. No multiplier is needed. Rows of `CM` that are
zero are dropped entirely. Each row that remains gets a 2-bit index, the
number of zero rows dropped immediately before it (0 to 3).

Storage in this design:

* **Basis.** Each lane has its own `BM`: 9 bytes, held as 18 nibbles in 18
  weight-GB words. Nibble *n* of lane *l* sits in bits `4l+3:4l` of word *n*.
  Nibble `2(r*3+j)` is the low half of `BM[r][j]` and nibble `2(r*3+j)+1` is
  the high half. `OP_LDBM` loads all 64 bases in 18 cycles.
* **Coefficients.** One `CM` row per lane takes 3 weight-GB words, with
  coefficient *r* of lane *l* in word *r*, bits `4l+3:4l`. `OP_LDW` reads the
  3 words (3 cycles). It then restores the 3 weights (3 cycles), writes them
  into the idle bank of each lane's weight buffer and swaps the banks.
* **Indexes.** One index-SRAM word holds one 2-bit index per lane, index *l*
  in bits `2l+1:2l`. `OP_COMP` consumes one word per step.

Different lanes normally hold different output channels. Because each lane
has its own coefficient stream and its own index stream, each lane skips its
own pruned rows.

## Row skipping: the SWPR IFM buffer

The input buffer sits between the feature-map GB and the PE lines. It is
written one row per cycle ("sequential write") and read by all 64 lines at
once, each line choosing its own row ("parallel read").

*Write side.* A 512-bit word from the FM GB first waits one cycle in a holding
register (`Tmp_Buffer`). Its low 17 bytes then become one IFM row, with pixel
*i* in bits `8i+7:8i`. Rows go into two groups, G0 and G1, of 8 rows each.
When a group is full, writing moves to the other group. Together the two
groups form a 16-row window. Logical rows 0-7 are the older group and 8-15 the
newer one. Refilling a group makes it the newer half, so the window slides
forward 8 rows at a time. A group reset (a bit of `OP_LDIFM`) starts over at
G0.

*Read side.* Every line *l* has a row pointer `ptr[l]`, which `OP_COMP` can
clear. In each compute step the line reads its index `idx[l]` and uses

```
row[l]  = ptr[l] + idx[l]        (the next non-pruned row)
ptr[l] <= row[l] + 1
```

If `row[l]` falls beyond the 16-row window, the line is marked invalid for
that step and does no MACs. A program avoids this by reloading rows in time.
The tests cause it on purpose.

One step consumes one row per line. With 16 rows resident, a line can skip
one pruned row for every useful one, on average, before it has to wait for
new rows. That is a 50% row sparsity served at twice the raw GB rate, which
matches the published design's target: 50% of the gaze network's weights
pruned, and a 2x bandwidth gain from the SWPR buffer.

## PE lines

Each PE line has 8 PEs, each an 8-bit by 8-bit multiplier with a 24-bit
accumulator, for 512 multipliers in all. A step works like this:

1. `load`: the 17-pixel window of the line's selected row enters the line's
   IFM FIFO, together with the line's valid flag.
2. `K` MAC cycles, with *K* set in the instruction. Weight *t* of the line's
   row is broadcast to all 8 PEs. PE *p* multiplies it with FIFO entry
   `p*stride` and accumulates. Then the FIFO shifts by one.

After a step, PE *p* has added `sum_k w[k] * x[p*stride + k]`. The 8 PEs
therefore produce 8 neighbouring outputs of a 1-D convolution ("1-D row
stationary"). Seventeen pixels are exactly enough for a 3-wide row at stride 2
(`7*2 + 3`). At stride 1 rows up to 10 weights wide fit, but a single `OP_LDW`
restores only 3 weights. A 2-D kernel or a sum over input channels is built by
running further steps without clearing the accumulators.

`OP_STORE` requantises each accumulator: arithmetic right shift, optional
ReLU, saturation to signed 8 bits. It captures all 512 results in the OFM
buffer and writes them as 8 words of 512 bits. Word *k* holds lines
`8k..8k+7`, and in each line PE 0 is the lowest byte.

PE line 63 has a 4-2-1 tree of 7 comparators behind its outputs. In argmax
mode (a bit of `OP_STORE`) its 8 output bytes are replaced by `{0,...,0,
position, max}`: byte 0 is the largest output and byte 1 its position (0-7).
On a tie the lower position wins. This lets the eye detector's output row be
reduced to a peak on chip.

## Programming model

After reset the host owns every memory. It fills them through the host port,
pulses `start`, and waits for `done`. The controller then fetches 32-bit
instructions from address 0. Fetch and decode take 2 cycles per instruction.
`icam_pkg` has functions (`mk_ldifm`, `mk_ldbm`, `mk_ldw`, `mk_comp`,
`mk_store`, `mk_compw`, `mk_end`) that build each encoding.

| Opcode `[31:28]` | Fields | Action | Cycles |
|---|---|---|---|
| `OP_END` 0 | - | stop; `busy` falls, `done` rises | 2 |
| `OP_LDIFM` 1 | `[27]` GB, `[26:20]` rows, `[19]` group reset, `[15:0]` addr | stream rows into the IFM buffer | 2 + rows + 2 |
| `OP_LDBM` 2 | `[15:0]` weight-GB addr | load 18 basis nibbles into every restore engine | 2 + 18 + 1 |
| `OP_LDW` 3 | `[15:0]` weight-GB addr | 3 coefficient reads, 3 restores, bank swap | 2 + 3 + 3 + 3 |
| `OP_COMP` 4 | `[27]` clear acc, `[26]` clear pointers, `[25:24]` stride, `[23:20]` K, `[18:16]` first weight entry, `[15:0]` index addr | one step: index read, row select and load, K MACs on weight entries b..b+K-1 | 2 + 2 + K |
| `OP_STORE` 5 | `[27]` GB, `[26:22]` shift, `[21]` ReLU, `[20]` argmax, `[15:0]` addr | capture and write 8 words | 2 + 1 + 8 |
| `OP_COMPW` 6 | as `OP_COMP` | `OP_COMP`, while the next `CM` row (the 3 weight-GB words after the last row restored) is restored into the idle bank; swap at the end | 2 + max(2 + K, 8) + 1 |

Instructions do not overlap, with one exception. `OP_COMPW` uses the second
bank of the weight buffers for what it is there for: it restores the next
weight row during the MAC cycles of the current one. A chain `OP_LDW`,
`OP_COMPW`, `OP_COMPW`, ..., `OP_COMP` therefore costs 11 cycles per step
instead of 18 for `OP_LDW` + `OP_COMP` (with K = 3). The restore engine reads
its coefficients from a pointer that `OP_LDW` sets and each `OP_COMPW`
advances, so a layer's `CM` rows must be stored back to back.

The published chip also maps convolutions in two different ways. Only the
program has to change between them:

* **CONV / point-wise CONV (inter-channel reuse).** All lanes read the same
  input rows and hold weights of different output channels. Each lane's
  indexes skip that channel's pruned rows.
* **Point-wise CONV (channel-wise sparsity).** Each input channel is one
  IFM row. A `CM` row then holds the weights of 3 consecutive channels, so one
  index stands for 3 channels. The stored row is used by three `OP_COMP`
  steps with `K = 1` and first weight entries 0, 1 and 2. A lane whose channel
  group is pruned gives index 3 on the group's first step and moves straight
  to the next group.
* **Depth-wise CONV (intra-channel reuse).** Here one channel's work is
  spread over the lanes. For example, lanes 0-15 produce output row 0 and
  lanes 16-31 output row 1, with weight rows 0, 1, 2 rotating through the
  steps. An index of 1 on the first step of lanes 16-31 shifts their input
  row down by one. The feature map is then stored column-first in the GB.
  Because an index reaches at most 3 rows ahead, one load serves up to four
  neighbouring output rows of one channel. Lanes working on different
  channels need the channels loaded in turn.

## Host port

When `busy` is low, `host_en` / `host_we` / `host_sel` / `host_addr` /
`host_wdata` access one memory directly. `host_sel` is an `hsel_e`: FM GB 0,
FM GB 1, weight GB, index SRAM or instruction SRAM. Narrower memories take
the low bits of `host_wdata`. A read returns its data on `host_rdata` one
cycle later. Host accesses made while `busy` is high are ignored. In the
camera system this port stands in for the FPGA that links the sensor to the
chip.

## How far it can be trusted

Each module has a self-checking testbench in `tb/`. Each testbench compares
the block with a model written independently, for example with floor
division instead of shifts, or direct convolution sums. Each testbench has
also been shown to fail on a deliberately broken copy of its block.

The chip-level test, `tb_icam_chip`, runs at the full default size (64 lanes,
all memories at full capacity). It loads two tiles of work through the host
port, runs a 23-instruction program and checks all 1,536 output bytes against
its model. It also checks the total cycle count against the table above and
makes sure each mechanism happens at least once:

* row skipping and lines running past the window
* zero coefficients
* saturation and ReLU clipping
* one bank swap per `OP_LDW`, and weight restores overlapped with MACs by `OP_COMPW`
* three SWPR group switches
* an argmax store

A second chip-level test, `tb_layer_workloads`, runs three kinds of layer
from the two networks, all at full size. Each is checked against a direct 2-D
convolution of the restored weights:

* a row-pruned 3x3 CONV (4 to 64 channels) at strides 1 and 2, with about
  half of every lane's kernel rows pruned
* a depth-wise 3x3 CONV using the row-offset mapping
* a point-wise CONV with channel-group pruning

Nothing was compared with the fabricated chip. Its numbers (253 FPS, 91.49
uJ/frame, 0.29-18.9 TOPS/W) depend on clocking, SRAM macros and a full
network program, none of which is reproduced here.

## Departures from the published chip, and known limits

* **Instruction set, controller timing and host port.** These are
  invented. The published chip shows only a controller fed 32 bits at a
  time from a 4 KB instruction SRAM.
* **IFM row width.** The published buffer drawing gives a row group as
  8 x 10 x 8 bit but feeds each PE line 17 x 8 bit. Here a row is 17 pixels,
  and one 512-bit GB word carries one row in its low 17 bytes. The remaining
  47 bytes of an input word are unused. An FM GB therefore holds at most 800
  input rows (13.6 KB of pixels), and an output written by `OP_STORE` (64
  bytes per word) has to be re-laid-out by the host before it can be read
  back as input rows.
* **Run-length rule, coefficient code, basis loading, rounding and
  saturation.** All of these are this design's choices.
* **Global-buffer routing.** The published block diagram draws FM GB 0
  feeding the IFM buffer and the OFM buffer writing FM GB 1. Here either GB
  can play either role (a bit in `OP_LDIFM` and `OP_STORE`), so consecutive
  layers can swap buffers.
* **Memory total.** The five memories add up to 304 KB. The published chip
  reports 316 KB of SRAM in total. The difference is presumably the IFM, OFM
  and weight buffers, which are flip-flops here.
* **Restore rank and width.** `RANK = 3` and `KW = 3` are read from the
  published illustration, not from a stated number.
* **Argmax** works over the 8 outputs of line 63 only. Any running maximum
  over a whole map is left to the program or host.
* **Little pipelining between instructions.** Only weight restore overlaps
  with MACs (`OP_COMPW`). Row loading, index reads and stores run one after
  another, and the model is cycle-accurate only for its own controller.
* **Not modelled:** the mask and sensor, the FPGA link, clock and supply
  generation, and the predict-then-focus control itself (when to
  re-detect, how to extrapolate the ROI). The last of these is an algorithm
  running on top of the chip, and its rules are not published.

## Capacity against the published workloads

| Workload | Needed | Available here | Fits |
|---|---|---|---|
| Gaze-estimation weights after compression | about 117 KB (2600 KB reduced 22.19x, published) | 180 KB weight GB + 20 KB index | yes |
| Eye-detection weights (8-layer network) | a few KB (estimated from its layer list: largest layer 3x3x16x32) | same | yes |
| Largest gaze-network activation, 24 x 40 x 64 | 61,440 B (from the published layer sizes) | 50 KB per FM GB, 13.6 KB as input rows | no, must be tiled |
| Coded measurement for reconstruction, 400 x 400 | 160,000 B (from the published matrix sizes 56x400 / 96x400) | 50 KB per FM GB | no, must be streamed |

## Simulating

Everything is plain SystemVerilog 2017. The package must come first on the
command line. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/icam_pkg.sv tb/tb_restore_engine.sv --top-module tb_restore_engine
./obj_dir/Vtb_restore_engine
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. A
watchdog stops it if it hangs. The block testbenches build in seconds. The
full-size chip tests (`tb_icam_chip`, `tb_layer_workloads`) take a few minutes to compile because
of the 64 lanes and 2.5 Mbit of memory arrays, and then runs in well under a
second. To experiment with sizes, change the constants in `icam_pkg`. The
memory sizes are derived from the published capacities there.
