# EyeCoD accelerator in SystemVerilog

EyeCoD tracks gaze with a lensless FlatCam camera and two neural networks
that take turns in a *predict-then-focus* pipeline. A segmentation network
(RITNet, 128x128 input) finds the eye and a region of interest (ROI). This
is slow, and the eye moves little, so it runs only once every 50 frames. A
gaze network (FBNet-C100) then runs on the small ROI in every frame. This
RTL is the accelerator that runs both networks:

- 128 MAC lanes of 8 MACs each;
- two 512 KB activation global buffers (Act GB0/GB1);
- two 64 KB ping-pong weight buffers and a 512 KB weight GB;
- a 20 KB index SRAM and a 4 KB instruction SRAM;
- a controller that runs a program per frame.

Three ideas shape the hardware:

1. **Partial time-multiplexing.** In its generic and point-wise layers the
   gaze network owns all lanes. Its depth-wise layers leave many lanes idle,
   and on segmentation frames the segmentation network's layers use those
   idle lanes in the same compute rounds.
2. **Row-wise reuse inside a lane.** A lane holds one input row of one
   channel in a FIFO. It gets one weight per cycle, and each weight is used
   by all 8 MACs at once.
3. **Sequential-write, parallel-read input buffer.** While the lanes compute
   on one group of 16 rows, the next 16 rows are fetched into the other
   group. Each lane picks any of the 32 rows through a crossbar.

The camera optics and the ROI cropping rule are part of the algorithm.
They are not in this RTL. The ROI reaches the hardware only as the row and
pixel offsets of the program's activation loads.

## Structure

```
                 ext port (host / sensor side: load memories, read results)
                    |
   Instr SRAM --> controller --------------------------------------+
   Index SRAM ------------------------------+ (sel per lane)       |
   Weight GB --> Weight Buffer 0/1 ---------|--- one weight/lane ->|
                  (ping-pong)               v                      v
   Act GB0 <--+--> Tmp Buffer -> G0/G1 -> crossbar --> 128 MAC lanes x 8 MACs
   Act GB1 <--+                                              |
              +<-------- Output Act Buffer (requantise) <----+
```

| Module | Role |
|---|---|
| `eyecod_pkg` | sizes, types, instruction encoding, requantisation |
| `eyecod_mac` | 8x8-bit signed MAC, 24-bit accumulator |
| `eyecod_mac_lane` | 12-entry input FIFO shared by 8 MACs |
| `eyecod_mac_array` | 128 lanes; clear mask split between task A and task B |
| `eyecod_sram` | single-port synchronous SRAM, 1-cycle read |
| `eyecod_act_gb` | 4-bank Act GB with tensor addressing |
| `eyecod_input_act_buffer` | Tmp Buffer, In Act G0/G1, switch control, crossbar |
| `eyecod_output_act_buffer` | capture, requantise, background write-back |
| `eyecod_weight_buffer` | two 512-row weight buffers, load/read/swap |
| `eyecod_controller` | fetch, issue with hazard stalls, config, frame counter |
| `eyecod_top` | the accelerator |

Sizes and how they follow from the configuration:

- **Act GB:** 4 banks x 8192 words x 128 bits = 512 KB.
- **Weight buffer:** 512 rows x 128 lanes x 8 bits = 64 KB.
- **Weight GB:** 32768 x 128 bits = 512 KB.
- **Index SRAM:** 256 entries x 640 bits = 20 KB. An entry holds 128 lanes x 5 bits.
- **Instruction SRAM:** 512 x 64 bits = 4 KB.

## A compute round

A round is the basic unit of work. `OP_COMP idx, k, row, clr_a, clr_b` does
the following:

1. **Load cycle.** Each lane `l` copies row `sel[l]` into its FIFO through
   the crossbar. `sel` is entry `idx` of the index SRAM. `sel[4]` picks G0
   or G1, and `sel[3:0]` picks one of the 16 rows of that group. A row is
   one channel of one image row, 12 pixels long. If the task's clear bit is
   set, the lane's accumulators restart from zero.
2. **`k` step cycles.** In step `t` the active weight buffer supplies row
   `row + t`, which holds one weight per lane. MAC `j` adds
   `weight * fifo[j]`, then the FIFO shifts one place towards MAC 0.

After `k` steps, MAC `j` of lane `l` holds
`sum_t w_l[t] * x[start + j + t]`: eight neighbouring outputs of a 1-D
convolution. Each weight is fetched once and used eight times.

A 2-D convolution is a sequence of rounds. The rounds cover each kernel
row `kr` and each input channel `c`, and accumulate without clearing. For a
3x3 convolution from 16 to 16 channels, one output row takes 3 x 16 rounds:

- **Lanes:** lane `o` computes output channel `o`.
- **Index entry:** every lane selects the row of channel `c`.
- **Weights:** weight row `(kr*16 + c)*3 + kx` holds `W[o][c][kr][kx]` in lane `o`.

A round takes `k + 1` cycles: one load cycle and `k` steps.

The index entry chooses which lane reads which row, so one mechanism
covers several reuse patterns:

- **Generic and point-wise layers.** All lanes read the same row with
  different filters, so the row is reused across filters.
- **Depth-wise layers.** Lane `l` reads channel `l`. Several lanes can read
  the same row with different kernel rows, which is the column-wise reuse.
  Two lanes can read two 8-pixel halves of one longer image row, which is
  the deeper row-wise reuse.

Lanes that have no work in a round get zero weights.

### Sharing lanes between the two networks

Register `SPLIT` divides the lanes:

- Lanes `< SPLIT` belong to task A, the gaze network.
- The other lanes belong to task B, the segmentation network.

`OP_COMP` has one clear bit per task. The two tasks can therefore start
and finish their accumulations in different rounds. Their index entries,
weights and stores are independent per lane group. With `SPLIT = 128`,
task A has the whole array.

The controller counts frames modulo 50. Frame 0, 50, 100, ... is a
segmentation frame. `OP_BNSEG target` jumps over the segmentation part of
the program on every other frame. The end-to-end test runs a depth-wise
3x3 convolution on lanes 0-15 and a point-wise convolution on lanes 16-31
side by side in the same rounds, on the segmentation frame only.

## Input activation buffer

`OP_LDA h, w, ct, mode` fetches the 16 channels of channel tile `ct` at
image row `h`, pixels `w .. w+11`. The rows come from the input Act GB,
4 pixels per read (3 reads), and are collected in the Tmp Buffer. When the
last read returns, the switch control writes the 16 rows into G0 or G1,
alternating, with G0 first after reset.

The load is busy for 4 cycles. It runs while a compute round uses the
other group. `OP_COMP` waits only if a load is still running, because the
group being written could be the one it needs.

Pixels and rows outside the tensor read as zero, which gives zero padding
and the halo of a partition. The mode argument applies 2x upsampling on
the read:

- `LD_UP_DUP` reads source `(floor(h/2), floor(x/2))`, duplicating each pixel.
- `LD_UP_ZERO` reads the same source but returns zero at odd coordinates,
  inserting zeros.

**G0/G1 parity is the program's job.** A load always goes to the group
that was not written last. A program that branches over a section holding
an odd number of loads must add one load on the other path. The
end-to-end program does this at the `OP_BNSEG` target.

## Activation GB layout and reshaping

One bank word holds 16 channels of one pixel, which is one channel tile.
Pixel `x` of row `h` in tile `ct`, for a tensor of height `H` and width
`W`, is stored at:

    bank = x mod 4
    addr = (ct * H + h) * ceil(W/4) + floor(x/4)

A 6x6x24 tensor therefore uses 2 tiles x 6 rows x 2 = 24 addresses, with
banks 0,1,2,3,0,1 along a row. Every tensor access touches four
consecutive pixels, one per bank, from any start pixel. Tensor geometry
comes from the `IN_DIMS` and `OUT_DIMS` registers.

The four reshaping operations the networks need are only address choices:

| Operation | How it is done |
|---|---|
| Partition | load with row/pixel offsets; outside pixels read as zero and are never written |
| Concatenation | a store writes 16-lane group `g` to channel tile `ct + g`; later layers append by choosing `ct` |
| Downsampling | `STORE` with the ds bit keeps outputs 0, 2, 4, 6 of each lane and writes them to 4 consecutive pixels |
| Upsampling | `LDA` mode, see above |

The two GBs exchange roles between layers. Register `GBSEL` names the GB
that is read. The other GB receives the stores.

## Output activation buffer

`OP_STORE h, w, ct, gfirst, gcnt, {rowstep, ds}` does the following:

1. **Capture.** It takes all 128 x 8 accumulators at once.
2. **Requantise.** Each value is arithmetic-shifted right by `shift`,
   passed through ReLU if `relu` is set, and saturated to int8. Both
   `shift` and `relu` come from register `REQUANT`.
3. **Write.** Groups `gfirst .. gfirst+gcnt` are written to the output
   GB in the background. Each group is 16 lanes, i.e. 16 channels.

| Case | Cycles per group |
|---|---|
| Normal: 8 pixels | 2 |
| Downsampling: 4 pixels | 1 |

Successive groups go to successive channel tiles. With the `rowstep` bit
set, they go to successive rows instead. Because the results are
captured, the lanes can start the next round straight away. Only the next
`OP_STORE` waits for the write to finish.

## Weight buffers

`OP_LDW addr, n` copies `n` 128-bit weight GB words into the idle weight
buffer, one word per cycle. Word `i` fills lanes `16*(i mod 8) ..` of row
`i / 8`. The load takes `n + 1` cycles.

The lanes meanwhile read the active buffer. `OP_WSWAP` exchanges the two
buffers once the load and the current round are done. The next layer's
weights therefore load while the current layer computes.

## Controller and instruction set

The controller issues one 64-bit instruction per cycle, in order:

- It fetches from the instruction SRAM.
- It reads the index SRAM for a `COMP` when the `COMP` issues.
- An instruction stalls only until the engine it needs is free.

| Op | Fields | Waits for |
|---|---|---|
| `CFG` (1) | `[59:56]` register, `[31:0]` value | - |
| `LDW` (2) | `[27:13]` weight GB word, `[12:0]` count | weight load |
| `WSWAP` (3) | - | weight load, compute |
| `LDA` (4) | h, w, ct, mode | act load |
| `COMP` (5) | idx, k, clr_a, clr_b, imm = weight row | compute, act load |
| `STORE` (6) | h, w, ct, gfirst, gcnt, mode = {rowstep, ds} | compute, store |
| `SYNC` (7) | - | everything |
| `BNSEG` (8) | imm = target | - |
| `JMP` (9) | imm = target | - |
| `EOF` (10) | - | everything, then `frame_done` |

The common fields are:

| Field | Bits |
|---|---|
| op | `[63:60]` |
| h | `[59:50]`, signed |
| w | `[49:40]`, signed |
| ct | `[39:33]` |
| mode | `[32:31]` |
| gfirst | `[30:28]` |
| gcnt | `[27:25]` |
| idx | `[24:17]` |
| k | `[16:14]` |
| clr_a | `[13]` |
| clr_b | `[12]` |
| imm | `[11:0]` |

The configuration registers are:

| Register | Value |
|---|---|
| `IN_DIMS` | `{h[17:9], w[8:0]}` |
| `OUT_DIMS` | `{h[17:9], w[8:0]}` |
| `REQUANT` | `{relu, shift[4:0]}` |
| `SPLIT` | first lane of task B |
| `GBSEL` | which GB is read |

Counters in `perf`:

- compute rounds;
- rounds with a split array;
- cycles with an act load under a compute round;
- stall cycles.

## External port

While the controller is idle, `ext_*` reads or writes any memory, one
128-bit word per cycle:

| `ext_sel` | Memory | Address |
|---|---|---|
| `EXT_ACT0`, `EXT_ACT1` | Act GB | `{word, bank[1:0]}` |
| `EXT_WGB` | weight GB | word |
| `EXT_INSTR` | instruction SRAM | instruction; data in `[63:0]` |
| `EXT_INDEX` | index SRAM | `{entry, chunk[2:0]}`, chunks 0..4 of 128 bits |

Read data appears on the cycle after the request. A frame runs from a
`frame_start` pulse until `frame_done`.

## Where this RTL departs from, or goes beyond, the published design

- **Size.** The configuration table gives 128 lanes x 8 MACs (1024 MACs)
  and 2 x 512 KB of Act GB. The fabricated prototype is smaller (512 MACs,
  316 KB SRAM in total). This RTL follows the table.
- **Crossbar select.** The published buffer diagram labels the select
  input of its switch control "128*2b". Here every lane has a 5-bit select
  (group + row). At 256 entries this exactly fills the 20 KB index SRAM.
- **Own choices, not published:**
  - the instruction set, its encoding and the hazard rules;
  - the 24-bit accumulator;
  - the 12-entry FIFO;
  - requantisation;
  - the GB address formula, beyond the bank order and the 24-address
    example;
  - the load and store timings;
  - the upsampling and downsampling mechanisms;
  - the single `SPLIT` boundary.
- **Load cycle.** A compute round spends one cycle loading the FIFOs.
  The lanes therefore reach `k/(k+1)` of peak: 75% for 3x3 kernels and
  83% for 5x5.
- **No loops.** The instruction set has no loop instructions. One `COMP`
  per round means that a full network does not fit in 512 instructions. A
  host has to reload program segments, or loop instructions with address
  increments would have to be added.
- **Weight capacity.** The weights of FBNet-C100 (several MB) exceed the
  512 KB weight GB. This RTL refills it only between frames, through the
  external port.
- **Not in this RTL:** the FlatCam optics, ROI computation from the
  segmentation map, and pads/clocking. Image reconstruction is expected to
  run as matrix products on the lanes.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=N failures=M`.

- `tb_eyecod_mac`: random sequences with clear and hold.
- `tb_eyecod_mac_lane`: 1-D convolutions with k = 1..5, accumulation
  across rounds, and round length.
- `tb_eyecod_mac_array`: per-lane data, and split clears for task A and
  task B.
- `tb_eyecod_sram`: read latency and hold.
- `tb_eyecod_act_gb`: the 6x6x24 layout in 24 addresses, unaligned
  accesses, padding and raw access.
- `tb_eyecod_input_act_buffer`: loads with padding, both upsampling
  modes, G0/G1 alternation, crossbar selects and 4-cycle busy.
- `tb_eyecod_output_act_buffer`: requantisation, concatenation, rowstep,
  downsampling and drain cycle counts.
- `tb_eyecod_weight_buffer`: ping-pong loads under reads, swap and load
  time. It uses 64 rows.
- `tb_eyecod_controller`: issue and stall rules, branch on segmentation
  frames, and counters. It uses a period of 3 frames.
- `tb_eyecod_top`: the whole accelerator at its default sizes, over two
  frames.
- `tb_eyecod_top_dw`: a depth-wise layer with both depth-wise reuse
  schemes, at the default sizes.

`tb_eyecod_top_dw` runs one depth-wise 3x3 layer of 16 channels on a
12x16 input, on the whole accelerator. It uses both depth-wise reuse
schemes at once:

- **Column-wise.** Three lanes per channel hold three output rows.
- **Deeper row-wise.** Each 16-pixel row is loaded as two 8-pixel
  sub-rows, one into G0 and one into G1.

Together these keep 96 of the 128 lanes busy, and a block of 3 output
rows takes 5 rounds instead of 9. The stores use the row-step mode.
In this mapping each round needs two 4-cycle loads, so the act loads,
not the lanes, set the pace.

`tb_eyecod_top` runs three layers:

1. a padded 3x3 convolution;
2. a shared-lane depth-wise plus point-wise section, which runs only on
   the segmentation frame;
3. an upsample, 1x1 convolution and downsample layer, with the GB roles
   exchanged.

The weights for each layer stream into the idle buffer under the previous
layer. Every output is compared with a reference model. The test also
requires that each of these happened at least once:

- stalls;
- act loads under compute;
- weight loads under compute;
- split rounds;
- a segmentation frame and a skipped one;
- GB role exchange;
- padding, upsampled loads and downsampled stores;
- G0/G1 alternation;
- stores waiting for the write-back.

To simulate with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl rtl/eyecod_pkg.sv tb/tb_eyecod_top.sv \
        --top-module tb_eyecod_top -o sim
    ./obj_dir/sim

For another testbench, replace `tb_eyecod_top` with its name. The
testbenches that override a parameter do so in their own instance, so no
command-line parameters are needed.

## Lint notes

- Verilator reports `rst_n` as used both as an asynchronous reset and in
  assertion `disable iff` clauses (SYNCASYNCNET). This is intended.
- Some struct fields and high bits of the instruction word are not used by
  every consumer.
