# DPUV3INT8-style inference engine in SystemVerilog

This is an int8 convolutional-network accelerator built around one idea:
**a small number of independent functional units working on banked scratch-pad
memories, kept in step only by type-based dependency tokens that the compiler
writes into every instruction.** There are no caches and no hardware hazard
detection. The compiler decides where every tensor lives, cuts layers into
tiles, and software-pipelines the tiles. The hardware just runs four
instruction queues in parallel and lets an instruction start once the
instructions it depends on have finished.

The engine follows the architecture described in "DPUV3INT8: A Compiler View
to programmable FPGA Inference Engines". That description is given from the
compiler's point of view. It fixes the structure (units, memories, banks, the
dependency scheme), not the bit-level details. Everything below the structure
is this design's own and is marked as such: widths, encodings, arbitration and
timing.

```
                      +--------------------------------------------------+
   DDR port  <------> | ddr_arbiter  (fetch / LOAD / SAVE, ids)           |
                      +------+----------------+---------------+-----------+
                             |                |               |
                      +------v------+   +-----v-----+   +-----+-----+
                      | dispatcher  |   | load_unit |   | save_unit |
                      | 4 queues    |   | +format x4|   |           |
                      | + dep_sync  |   +--+-----+--+   +-----^-----+
                      +--+--+--+--+-+      |     |            |
            start/instr  |  |  |  |        | PM  | FM write   | FM read
                         v  v  v  v        v     v            |
                 LOAD SAVE CONV MISC   +-------+  +-----------+---------+
                           |    |      | param |  | fm_arbiter (per      |
                           |    |      |  mem  |  |  memory, per port)   |
                    conv_ctrl misc_ctrl+---+---+  +----------+-----------+
                           |    |          | broadcast        |
                           v    v          v                  v
                 +-------------------------------------------------------+
                 |  pe x4 (SIMD): fm_mem x3 (8 banks each), conv_array,  |
                 |  misc_alu                                             |
                 +-------------------------------------------------------+
```

## The engine at a glance

* **Four processing engines (PEs) in SIMD.** Every PE holds its own
  feature-map memory (FM) and its own copy of the CONV and MISC datapaths. One
  controller per unit drives all four PEs with the same signals. The four PEs
  therefore process four different tensors (four images of a batch) with one
  instruction stream. Only LOAD and SAVE see the four tensors as different:
  tensor `p` lives `p * batch_stride` words after tensor 0 in DDR.
* **One parameter memory (PM)**, shared by the PEs. CONV reads one PM word per
  step and broadcasts it to all four PEs.
* **Four functional units.**
  * LOAD: DDR to FM, or DDR to PM.
  * SAVE: FM to DDR.
  * CONV: convolution with bias, ReLU and requantisation.
  * MISC: max pool, element-wise addition, and data movement. Data movement
    covers sampling, up-sampling and column interleaving.
* **Four in-order instruction queues**, one per unit, filled from a single
  instruction stream in DDR. A queue head starts when its unit is idle and its
  dependency tokens are available.

Default sizes are NPE = 4, NMEM = 3 memories per FM and NBANK = 8 banks per
memory; all three come from the architecture. The following are this design's
choices:

* CP = 8 channels per vector word, which is 64 bits.
* FM_DEPTH = 2048 words per bank, so each FM holds 384 KiB.
* PM_DEPTH = 2048 words of 512 bits, which is 128 KiB.
* DDR word = 64 bits.
* Instruction = 512 bits.

## Feature-map memory and the tensor layout

Each PE's FM consists of three independent memories. Each memory has one read
port and one write port. Behind each port are eight banks, and every bank has
its own address. One access can therefore move one 64-bit word from each of
the eight banks at eight different addresses. The memories are circular: all
address arithmetic is taken modulo the depth, so a tensor may run off the end
and continue at address 0. This lets a streamed tensor occupy a sliding window
of the memory.

A tensor in an FM is described by a `tdesc_t`:

| field | meaning |
|---|---|
| `mem` | which of the three memories |
| `bank` | bank holding row 0 |
| `addr` | word address of row 0 in that bank |
| `rowlen` | words between row `y` and row `y+8`, which share a bank |
| `cgs` | words per pixel (channel groups of 8 channels) |

Row `y` of the tensor is stored in bank `(bank + y) mod 8`. Channel group `g`
of pixel `x` in row `y` is at this address:

```
addr + ((bank + y) div 8) * rowlen + x * cgs + g      (mod FM_DEPTH)
```

Channels are innermost, eight per word. `dpu_pkg::row_bank` and
`dpu_pkg::elem_addr` compute the bank and the address, and every unit uses
them.

Because consecutive rows sit in consecutive banks, **eight consecutive rows
can be read in one cycle**. This is the basis of the compute tiles: the CONV
and MISC datapaths each have eight *lanes*, and lane `r` produces output row
`r` of the tile. When a result row is written back, lane `r` must land in the
bank that holds destination row `r`. The PE rotates the lane vector by the
destination's first bank to achieve this (`wrot`).

### Sharing the ports

Three units may read an FM memory: CONV, MISC and SAVE. Three may write one:
LOAD, CONV and MISC. `fm_arbiter` grants each memory's read port and each
memory's write port to one requester per cycle. Each port has its own rotating
priority. Requests to different memories proceed in parallel. A request stays
up until it is granted. Read data come back one cycle after the grant, and
`rd_mem` tells each reader which memory the data came from. The compiler
normally places a unit's input and output tensors in different memories, so
conflicts are rare. They still happen, and they are resolved without losing
data.

## Instructions

An instruction is 512 bits, fetched as eight 64-bit DDR words with word 0 in
the least significant bits. The encoding is this design's own (`instr_t` in
`rtl/dpu_pkg.sv`). Fields, from the least significant end:

| field | bits | used by | meaning |
|---|---|---|---|
| `op` | 4 | all | NOP 0, LOAD 1, SAVE 2, CONV 3, MISC 4, END 15 |
| `dpon` | 4 | all | unit types this instruction waits for (bit = `unit_e`) |
| `dpby` | 4 | all | unit types that wait for this instruction |
| `nop` | 1 | all | only take and give tokens; the unit is not used |
| `mode` | 4 | LOAD, MISC | LOAD: bit 0 = to PM, bit 1 = through the format unit. MISC: 0 max pool, 1 element-wise add, 2 copy |
| `relu`, `shift`, `shift_a`, `shift_b` | 1+5+4+4 | CONV, MISC | output ReLU and right shift; element-wise operand left shifts |
| `dst`, `src2`, `src` | 3 x 45 | CONV, MISC, LOAD, SAVE | tensor descriptors |
| `oco`, `ocs`, `up` | 4+4+4 | MISC copy | output column offset and step; up-sample factor 1/2/4 |
| `pad_l`, `pad_t` | 4+4 | CONV, MISC | left and top padding |
| `str_w`, `str_h`, `kw`, `kh` | 4 each | CONV, MISC | stride (or sample step); kernel size |
| `out_w`, `out_h`, `in_w`, `in_h` | 8 each | all | tile sizes (out_h <= 8 for CONV/MISC) |
| `ocg`, `icg` | 8 each | CONV, MISC | output and input channel groups |
| `b_addr`, `w_addr` | 16 each | CONV, LOAD | PM addresses of biases and weights |
| `fmt_ch` | 4 | LOAD | channels per pixel of a dense input (1..8) |
| `ddr_rstride`, `ddr_off`, `region` | 16+32+3 | LOAD, SAVE | DDR row stride, offset, and which of the five regions |
| `spare` | 175 | | zero |

## Dispatcher and dependency tokens

The `dispatcher` reads instructions from `instr_base` on. It appends each one
to the queue of its unit (depth 4) and stops at END. A queue head *issues*
when three things hold: the unit is idle, no issue is pending, and the head's
DPON tokens are there. A full queue stalls the fetch, not the other queues.

Dependencies name **unit types, not instructions**. This is the key rule of
the design and the one that is least obvious. `dep_sync` keeps one 4-bit token
counter for every ordered pair (producer type, consumer type):

* When an instruction of type `p` finishes, counter `(p, c)` goes up by one
  for every `c` in its DPBY mask.
* A head of type `c` may start only if counter `(p, c)` is non-zero for every
  `p` in its DPON mask. Starting takes one token from each of those counters.

Each queue is in order. So the k-th instruction of type `c` that waits for
type `p` is released by the k-th instruction of type `p` that signals type
`c`. The compiler only has to keep those counts matched. With matched counts
it can express a software pipeline such as:

```
LOAD t   (dpon SAVE for t >= 2, dpby CONV)    -- reuses the buffer freed by SAVE t-2
CONV t   (dpon LOAD, dpby MISC)
MISC t   (dpon CONV, dpby SAVE)
SAVE t   (dpon MISC, dpby LOAD)
```

In this pipeline, LOAD of tile t+1, CONV of tile t and SAVE of tile t-1 run at
the same time. A NOP instruction takes and gives tokens in the cycle it
issues, without starting its unit. It is useful to balance counts, for
example when a tile has no MISC stage. `done` pulses after END has been
fetched, every queue has drained and every unit is idle.

## CONV: lanes, phases and padding

`conv_ctrl` computes a tile of up to eight output rows (`out_h`) by `out_w`
columns by `ocg` groups of eight output channels. The input tile is
`in_h x in_w x icg` groups. The loop nest is as follows, innermost first:

```
for oc in 0..ocg-1:                    -- output channel group (PM weights)
  for wo in 0..out_w-1:                -- output column
    load biases (PM word b_addr+oc) into every lane's accumulators
    for l in 0..kh-1, m in 0..kw-1, g in 0..icg-1, ph in 0..phases-1:
        read one FM word per lane, one 8x8 weight block from the PM,
        MAC into the enabled lanes
    requantise and write the 8 lanes (one word each) to the destination
```

Each MAC step does 8 lanes x 8 output channels x 8 input channels =
512 int8 multiply-accumulates into int32 accumulators, in every PE. The
weight block for (oc, l, m, g) is PM word
`w_addr + ((oc*kh + l)*kw + m)*icg + g`. Word layout: byte `o*8+i` holds
weight (output o, input i). A bias word holds eight int32 values in its low
256 bits.

Lane `r` needs input row `r*str_h + l - pad_t`. With stride 1, the eight lanes
read eight consecutive rows, so all eight banks are distinct. With stride
`s`, lanes `r` and `r + 8/s` would hit the same bank. The controller
therefore splits the lanes into `s` **phases** of `8/s` lanes each, one read
per phase, so that no phase reads a bank twice. Strides 1, 2, 4 and 8 are
supported this way. Lanes whose input row or column falls outside the tile
(padding) are simply not enabled for that step. Padding costs no memory and
no extra cycles.

Requantisation, shared with MISC, is:
`out = sat8(relu ? max(0, r) : r)` with
`r = (acc + 2^(shift-1)) >>> shift`, a rounded arithmetic shift.

Timing, checked by the unit test:
`1 + ocg * out_w * (kh*kw*icg*phases + 3)` cycles from start to done, when
the memories are not contended.

## MISC: pooling, element-wise and data movement

`misc_ctrl` uses the same eight-lane row tile and the same phase scheme. It
drives the `misc_alu` in every PE. The ALU has per-lane, per-channel 20-bit
registers and four operations: INIT, MAX, LOAD-A and ADD-B.

* **Max pool** (`mode` 0): window `kh x kw`, stride `str_h, str_w`, padding taps
  ignored.
* **Element-wise add** (`mode` 1): reads `src` and `src2` and computes
  `requant((a <<< shift_a) + (b <<< shift_b))`. The two shifts align
  differently scaled int8 tensors.
* **Copy** (`mode` 2): output pixel (r, c) takes the input pixel
  `((r/up)*str_h, (c/up)*str_w)` and is written at column `c*ocs + oco`. With
  `up = 2` it is a 2x nearest up-sample. With `str_h = str_w = 2` it is a 2x
  down-sample. `up = str_h = str_w = 1` gives an identity move.
  * With `ocs = 2` and `oco = 0/1` it interleaves columns. Writing rows into a
    destination with a doubled row pitch interleaves rows as well. Together
    these are the *shuffle* that merges the four sub-convolutions of a 2x
    transposed convolution into one output.

Per output column and channel group, an uncontended tile takes these
cycles, plus one start cycle per instruction:

* max pool: `kh*kw*phases + 3`
* element-wise add: 4
* copy: `phases + 2`

## LOAD, SAVE and the format unit

Both units address DDR as `region_base[region] + ddr_off + p*batch_stride +
row*ddr_rstride + word`. The five region bases are inputs, outputs,
parameters, instructions and swap. They come from outside the engine, as
registers. Tensor rows in DDR are dense vector words, channels innermost.

* **LOAD to FM** fetches one word per PE (four DDR reads), then writes the
  four words to the same FM location in the four PEs with one write request.
* **LOAD to PM** (`mode` bit 0) assembles each 512-bit PM word from eight
  consecutive DDR words. It writes `out_h * out_w` PM words from `w_addr` on.
* **LOAD with format** (`mode` bit 1, `1 <= fmt_ch <= 8`) is for input images
  with few channels, such as RGB. There a row in DDR is a dense byte string
  of `fmt_ch` bytes per pixel. Each PE's `format_unit` is a 16-byte queue that
  cuts the string into one zero-padded vector word per pixel. Storing a
  3-channel image as full vector words would waste 5/8 of DDR bandwidth and
  space; the format path avoids that. With more than 8 channels the format
  path is bypassed and the load is a plain copy.
* **SAVE** reads one FM word location (all four PEs at once) and writes the
  four words to their four DDR tensors.

Both units keep at most one group of words in flight. They are simple rather
than bandwidth-optimal.

## DDR port

The engine has one DDR port, `ddr_req_t` out and `ddr_rsp_t` in:

* **Requests** are valid/ready, with a 2-bit id: fetch 0, LOAD 1, SAVE 2.
* **Read responses** come back in order with their id.
* **Writes** are posted.

`ddr_arbiter` shares the port among the three clients with rotating priority
and routes each response by its id. The DRAM and its controller are outside
the design. `tb/ddr_model.sv` is a behavioural model for simulation, with
fixed latency and random back-pressure.

## Parameters and sizes

The architecture fixes these sizes:

* 4 PEs
* 3 memories per FM
* 8 banks per memory
* 8 parallel output rows (the preferred convolution height)
* 5 DDR regions

This design chose the following:

* 8 channels per word
* 2048-word banks
* a 2048 x 512-bit PM
* 64-bit DDR words
* 512-bit instructions
* 32-bit accumulators
* a queue depth of 4
* 4-bit token counters

All of these are constants in `dpu_pkg` (module parameters where a module has
one). The instruction fields limit a single instruction as follows:

* up to 255 columns
* up to 255 channel groups (2040 channels)
* kernels up to 15 x 15
* strides 1, 2, 4 or 8

## Where this design departs from, or goes beyond, the architecture

* **CONV array.** The architecture calls CONV a systolic array. Here it is a
  fully parallel MAC array (8 lanes x 64 MACs per PE), with the same
  arithmetic and without systolic skew.
* **MISC tile height.** The architecture prefers a tile height of 2 for pooling
  and addition. MISC here works on the same eight-row tiles as CONV, because
  the eight banks allow it. The compiler can still use smaller tiles (out_h < 8).
* **Not offered:** average pooling, leaky ReLU and other non-ReLU activations,
  and any operation beyond max pool, element-wise add and copy. Layers needing
  more than 2040 channels per instruction must be split. An example is the
  2048-channel 1x1 convolutions of ResNet-50.
* **Concatenation** needs no instruction. Branches write into one tensor at
  different channel-group offsets (a descriptor with `cgs` larger than the
  groups written).
* **Design choices.** The instruction encoding, the token counters per type
  pair, the NOP, the region-plus-offset DDR addressing, the arbitration and
  all timing are this design's choices.
* **Scope.** Only one engine instance is built. The larger FPGA arrangement
  that runs up to 16 tensors is several instances side by side.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The expected values are computed in the
testbench itself:

* a direct convolution
* max, add and copy references
* a byte-stream reference for the format unit
* a memory model for the FM
* a token-pairing model for the dispatcher

The controller tests also compete for the memory ports at random. The DDR
model drops `ready` at random. The CONV and MISC tests check the cycle
formulas above.

`tb_dpu_top` runs the whole engine at its default sizes. It loads a
15-instruction program into the DDR model, together with weights and four
input images. The program is:

1. LOAD the weights into the PM.
2. LOAD a 16x8 RGB image through the format units.
3. LOAD a 16-channel tensor around the format units.
4. Two 3x3 padded convolutions with ReLU.
5. Two 2x2 max pools.
6. An element-wise add whose output wraps around the end of its memory.
7. A strided 1x1 convolution.
8. A 2x up-sample.
9. Two SAVEs.
10. A NOP.
11. END.

The test compares both saved tensors, for all four PEs, with a software model
of the whole chain. It also counts each mechanism and fails if one never
occurred:

* dependency stalls
* units running in parallel
* memory-port conflicts
* DDR back-pressure
* format and bypass loads
* stride phases
* padded lanes
* address wrap
* PM writes
* NOPs

It runs in about 5000 cycles.

To run any test with Verilator 5 from the top of the tree:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dpu_pkg.sv tb/tb_dpu_top.sv --top tb_dpu_top
./obj_dir/Vtb_dpu_top
```

Replace `tb_dpu_top` with any other `tb_*` to test one block. Building the
full engine takes a few minutes, mostly C++ compile time for the four PEs'
wide datapaths.

## Files

| file | content |
|---|---|
| `rtl/dpu_pkg.sv` | constants, `instr_t`, `tdesc_t`, port structs, layout and requantisation functions |
| `rtl/dpu_top.sv` | the engine |
| `rtl/dispatcher.sv`, `rtl/dep_sync.sv`, `rtl/sync_fifo.sv` | fetch, queues, tokens |
| `rtl/load_unit.sv`, `rtl/format_unit.sv`, `rtl/save_unit.sv`, `rtl/ddr_arbiter.sv` | DDR side |
| `rtl/conv_ctrl.sv`, `rtl/misc_ctrl.sv` | unit controllers |
| `rtl/pe.sv`, `rtl/fm_mem.sv`, `rtl/conv_array.sv`, `rtl/misc_alu.sv` | processing engine |
| `rtl/fm_arbiter.sv`, `rtl/param_mem.sv` | FM port sharing, parameter memory |
| `tb/ddr_model.sv` | behavioural DDR for the tests |
| `tb/tb_*.sv` | one self-checking test per module, `tb_dpu_top` end to end |
