# Serial-accumulation convolution engine

This is synthesizable SystemVerilog for a CNN convolution accelerator. Its
processing elements are chained so that partial sums move from one PE to
the next instead of being written back after every multiply. The
architecture comes from *An Energy-Efficient Accelerator Architecture with
Serial Accumulation Dataflow for Deep CNNs* (Ahmadi, Vakili, Langlois). This
RTL is an independent implementation of it. Where the paper is silent, the
choices made here are listed in the last sections.

The engine computes 3x3 convolutional layers with stride 1 and zero padding
1, such as the 13 convolutional layers of VGG-16. Its two main ideas are:

* **Filters in parallel, features in a pipeline.** There are 64 convolution
  units (CUs), one per filter. Each input feature is fetched from DRAM once
  per pass and travels from CU to CU through a chain of pipeline registers,
  so all 64 filters use it.
* **Serial accumulation inside a CU.** A CU holds the three weights of one
  filter row. Its three multipliers all see the same feature. The partial
  sum of an output moves left to right through two accumulator registers,
  picking up one product per cycle. The third PE writes a finished
  three-term partial result into an SRAM in every cycle. All 192
  multipliers do useful work in every cycle. The only exceptions are the
  row borders, where a product is replaced by the zero padding.

Each CU has two SRAM banks of 448 x 32 bits (224 KB in all). While one bank
accumulates a group of output rows, the other is copied out to DRAM
(ping-pong).

At the default size (64 CUs, 448-word banks, 16-bit data), this
implementation's schedule needs 78.6 M cycles for the VGG-16 convolutions.
That is 393 ms at 200 MHz. It moves 251.5 MiB to and from DRAM. Both
figures equal the latency and DRAM-access numbers the paper reports for its
chip (see "Running VGG-16").

## Block structure

```
              cfg/start            fx_* (feature fetch)     w_* (weight fetch, IW bus: 3 x 16 bit)
                  |                      |                          |
           +--------------+   slot_t     |                          |
           | engine_ctrl  |--------+     |                          |
           +--------------+        v     v                          |
              ^   meta       +-----------------+                    |
              |              |feature_pipeline |  stage u -> CU #u  |
        done  |              +-----------------+                    |
              |                 |    |  ...  |                      |
              |              +----+ +----+ +----+                   |
              |              |CU 0| |CU 1| |CU63|<------------------+
              |              +----+ +----+ +----+
              |                 drain port (broadcast address, per-CU data)
           +--------------+        |
           | output_drain |<-------+----> out_* (output features to DRAM)
           +--------------+
```

| file | block |
|---|---|
| `rtl/cnn_pkg.sv` | widths, default sizes, `layer_cfg_t`, and `slot_t` (the per-cycle control word) |
| `rtl/conv_pe.sv` | processing element: weight register WR, multiplier, optional zeroing mux, adder, optional accumulator |
| `rtl/sram_1r1w.sv` | one partial-result bank, 448 x 32, one read and one write port |
| `rtl/conv_unit.sv` | CU: PE #0..#2, feedback mux F0, two banks |
| `rtl/feature_pipeline.sv` | the CU-to-CU pipeline registers |
| `rtl/engine_ctrl.sv` | the schedule: passes, fetches, SRAM addresses, bank bookkeeping |
| `rtl/output_drain.sv` | copies a finished bank of every CU to DRAM |
| `rtl/conv_engine.sv` | the top level |

## Inside a CU: one filter row, one output per cycle

Consider output column `n` of some output row, for one filter row
`(w0, w1, w2)`. It needs `x(n-1)*w0 + x(n)*w1 + x(n+1)*w2`. The input
features of the row arrive on IX one per cycle. The output is built over
three cycles:

| slot (feature on IX) | PE #0 | PE #1 | PE #2 |
|---|---|---|---|
| `x(n-1)` | ACC0 <= F0 + x(n-1)*w0 | | |
| `x(n)` | | ACC1 <= ACC0 + x(n)*w1 | |
| `x(n+1)` | | | SRAM[n] <= ACC1 + x(n+1)*w2 |

Three outputs are in flight at once, so PE #2 writes one output in every
cycle. F0 is the value fed back from the SRAM: the sum of output `n` from
earlier filter rows and channels. On the first pass that touches an output,
F0 is 0 instead.

Two multiplexers handle zero padding at the row borders:

* M0 zeroes PE #0's product when the feature on IX is the last one of its
  row. Its left-tap product would otherwise belong to the first output of
  the next row.
* M2 zeroes PE #2's product when the feature is the first one of a row.

With these, consecutive rows, and consecutive passes, can be streamed back
to back with no gap. `tb_conv_unit` checks this timing cycle by cycle.

The SRAM read for F0 is issued two slots before the output's left tap, and
its data is used one slot later. A bank therefore needs one read and one
write per cycle. While it is being read out to DRAM, it needs only its read
port. The read issued for an output comes at least `P-3` cycles after the
previous pass wrote it, where `P` is the length of a pass in slots. The
controller requires `IL >= 4`, which makes this always safe.

## The schedule

`engine_ctrl` runs the following loop nest for one layer (`IL x IL x IC`
input, `OC` filters, `ROWS` output rows per bank):

```
for r0 in 0, ROWS, 2*ROWS, ... < IL        # row group  -> one "iteration" per (r0, g)
  for g in 0 .. ceil(OC/64)-1               # filter group: CU u computes filter 64*g+u
    for c in 0 .. IC-1                      # input channel
      for j in 0, 1, 2                      # filter row = one "pass"
        load weights w[64g+u][c][j][0..2] into CU u
        stream input rows r0+j-1 .. r0+ROWS-2+j, every column, one per cycle
    -> bank now holds output rows r0 .. r0+ROWS-1 of filters 64g .. 64g+63; swap banks
```

In a pass, the output at (row `r`, column `n`) is accumulated at SRAM
address `(r-r0)*IL + n`. Its first contribution is from `c = 0, j = 0`. For
output row 0 it is from `c = 0, j = 1`, because row -1 is padding. On that
first contribution F0 adds 0 and no read is issued.

Input rows outside the image are not streamed at all. A pass therefore
covers a contiguous range of input rows that may be one row shorter at the
top or bottom of the image. If a pass ends up empty, it is skipped; this
happens only with one-row groups. Skipping rather than streaming zeros is
what makes the VGG-16 cycle count come out at the published 393 ms.

`ROWS` is part of the configuration. For full use of the banks it is
`floor(448/IL)`: 2 rows for a 224-wide map, up to 32 for a 14-wide map. A
larger `ROWS` means fewer iterations, and so fewer re-fetches of the
weights.

The controller works a few cycles ahead of CU #0. A pass generator loops
over `(r0, g, c, j)` and computes each non-empty pass's row range and start
address. A streamer then turns the pass into one slot per cycle. Three
delay registers line up each slot's pieces:

1. the SRAM read for the output two slots ahead;
2. F0 and the weight-load token for the next slot;
3. the feature itself;
4. the write of the previous slot's output.

All of these go into one `slot_t` word.

## Skew: control travels with the data

CU #u sees each feature `u` cycles after CU #0. Every piece of per-cycle
control has to reach it with the same delay. The `slot_t` word therefore
carries, next to the feature:

* the M0, M2 and F0 selects;
* the SRAM read and write addresses and banks;
* the weight-load token;
* an end-of-iteration flag.

All of this travels through the same pipeline registers (`feature_pipeline`),
so every CU replays exactly CU #0's schedule.

Weights use the same skew. At the start of a pass the controller requests
the three weights for CU 0, then for CU 1 one cycle later, and so on. The
shared 48-bit IW bus therefore holds CU u's weights in exactly the cycle
the weight-load token reaches CU u. That cycle is the last slot of the
previous pass in that CU. The registers switch at the clock edge between
the two passes, so passes follow each other without a gap.

This needs a pass to last at least 64 cycles. If it is shorter, the
controller inserts idle slots (reported on `stall_wload`). That never
happens for VGG-16: its shortest pass is 182 cycles.

## Ping-pong banks and the output transfer

Iterations alternate between bank 0 and bank 1. The last write of an
iteration carries the end-of-iteration flag. When that flag reaches the
last CU, the bank is complete in every CU, and `output_drain` starts
copying it out. It sends addresses to all CUs at once and takes CU 0's
words first, then CU 1's, and so on. It sends one 16-bit output per cycle,
tagged with filter, row and column. Meanwhile the CUs accumulate the next
iteration in the other bank.

An iteration may start on a bank only when that bank has been emptied
(reported on `stall_bank`). With one output word per cycle, emptying a bank
takes `64 x ROWS x IL` cycles, i.e. 28,672 for VGG. This is shorter than
the compute of every VGG-16 iteration except those of conv1_1: with only 3
input channels, conv1_1 computes for 4,020 cycles per iteration and then
waits.

Each 32-bit result becomes a 16-bit output by an arithmetic shift right of
`OUT_SHIFT` (default 8, i.e. Q8.8 data) with saturation. `out_sat` flags
saturated words.

## Interface of `conv_engine`

All signals are synchronous to `clk`. `rst_n` is an active-low synchronous
reset.

| signal | dir | meaning |
|---|---|---|
| `start`, `cfg` | in | `cfg = {il, ic, oc, rows}` is sampled when `start` is high and the engine is idle. It requires `il >= 4` and `rows*il <= 448`. |
| `busy`, `done` | out | `busy` is high while a layer runs. `done` pulses once, when the last output word has been read from its bank. That word leaves on `out_*` two cycles later. |
| `fx_req, fx_c, fx_row, fx_col` | out | Feature fetch. The feature must be on `fx_data` in the next cycle. |
| `w_req, w_k, w_c, w_j` | out | Fetch of the three weights of row `j` of filter `k`, channel `c`. They must be on `w_data[0..2]` in the next cycle. `w_data[i]` is the weight of column `i`. |
| `out_valid, out_data, out_k, out_row, out_col, out_sat` | out | One output feature per cycle, to be stored in DRAM. |
| `stall_bank`, `stall_wload` | out | An idle slot was inserted because a bank was not yet empty, or because a pass was shorter than 64 cycles. |

The fetch ports never stall. A real system would put a prefetch buffer
between them and DRAM: the feature addresses follow a fixed pattern known
a whole pass ahead.

## Running VGG-16

The numbers below come from the schedule above, at the default sizes, for
the VGG-16 layers. The layer sizes are those of the standard VGG-16
definition. Cycles are feature slots.

| layer | IL x IL x IC -> OC | rows/bank | cycles | DRAM traffic |
|---|---|---|---|---|
| conv1_1 | 224x224x3 -> 64 | 2 | 450,240 (3.21 M incl. output waits) | 7.71 MiB |
| conv1_2 | 224x224x64 -> 64 | 2 | 9,605,120 | 33.89 MiB |
| conv2_1 | 112x112x64 -> 128 | 4 | 4,788,224 | 16.92 MiB |
| conv2_2 | 112x112x128 -> 128 | 4 | 9,576,448 | 30.62 MiB |
| conv3_x | 56x56x{128,256} -> 256 | 8 | 4,759,552 / 9,519,104 x2 | 15.25 / 28.90 x2 MiB |
| conv4_x | 28x28x{256,512} -> 512 | 16 | 4,702,208 / 9,404,416 x2 | 14.93 / 29.05 x2 MiB |
| conv5_x | 14x14x512 -> 512 | 32 (14 used) | 2,293,760 x3 | 9.51 x3 MiB |

Traffic counts 2 bytes per feature fetch, 6 bytes per three-weight fetch
and 2 bytes per output. In total this is 78,610,112 cycles, i.e. 393.05 ms
at 200 MHz, and 251.52 MiB. The paper reports 393.0 ms and 251.5 MB.

With the one-word-per-cycle output transfer used here, conv1_1 is limited
by the transfer. The whole network then takes 81.4 M cycles, i.e. 406.9 ms.
The paper does not say how wide its output path is. To hide this wait, the
path would have to carry about 7 words per cycle.

`tb_vgg_layers` runs conv1_1 and conv5_1 completely and checks every
output. The simulated cycle counts and traffic agree with the table:
2,306,378 cycles for conv5_1, including the final transfer, and 3,214,809
for conv1_1.

## What follows the paper and what does not

Taken from the paper:

* 64 CUs of 3 PEs;
* the PE chain WR -> multiply -> M0/M2 -> add -> ACC0/ACC1 -> SRAM;
* F0 feedback of partial results, with a 0 input on the first pass;
* two 448-word banks per CU, used as ping-pong buffers;
* pipeline registers that pass features from CU to CU;
* row-wise passes ordered filter row inside channel;
* 16-bit weights and features, and 32-bit SRAM words.

Choices made here, where the paper gives no detail:

* the `slot_t` control word and the skewed weight-loading timing;
* the one-read, one-write SRAM port structure;
* the loop order of row groups and filter groups;
* skipping padding rows, and the idle-slot rules;
* all interface protocols;
* the 32-to-16-bit conversion (shift by 8 with saturation);
* the width of the output transfer (one word per cycle).

Not implemented:

* **Bias.** The convolution formula includes a per-filter bias, but no
  hardware for it is described. F0 adds 0 on the first pass, so outputs
  carry no bias.
* **ReLU and pooling.** These are not described.
* **Other filter shapes.** Only 3x3 filters, stride 1 and padding 1 are
  supported: the CU is described only for this case.
* **The SRAM macros.** In a real chip these would be foundry macros;
  here they are behavioural arrays.
* **Host processor and DRAM.** These are outside the design, and the
  testbenches model them.

In the paper's Fig. 3 the text writes the third-cycle result with the same
term three times. The table beside it shows `x(0)w0 + x(1)w1 + x(2)w2`,
which is what is built. The paper's text calls the two banks "M" and "P";
its figure labels them "S" and "P". Here they are bank 0 and bank 1.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_conv_pe` | both PE variants against `psum + x*w`; zeroing; weight hold |
| `tb_sram_1r1w` | random traffic against a model; read latency; read-during-write returns the old word |
| `tb_conv_unit` | the table above cycle by cycle; multi-pass accumulation with border zeroing; readout of one bank while the other computes |
| `tb_feature_pipeline` | the delay of each of the 64 stages; reset |
| `tb_engine_ctrl` | with 4 CUs, every fetch against an independently generated schedule, plus each slot's write, read, F0, weight-load and border controls; stalls while waiting for a bank |
| `tb_output_drain` | the order, tags and saturation of every output word; a second bank queued while the first is sent |
| `tb_conv_engine` | full size. Three small layers end to end against a direct convolution. Exercises two filter groups, skipped padding rows, empty passes, weight-load stalls, bank stalls, saturation and both banks. For a one-iteration layer it checks that the features stream with no idle cycle. |
| `tb_vgg_layers` | full size. VGG-16 conv5_1 and conv1_1, every output checked (3.3 M checks, about 30 s) |

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cnn_pkg.sv tb/tb_conv_engine.sv \
          --top-module tb_conv_engine -Mdir obj_engine
obj_engine/Vtb_conv_engine
```

Change the testbench name to run another one. The testbenches assume a
two-state simulator. They give every register they read a reset or an
initial value; SRAM contents start random and are always written before
they are read.

## Changing the design

* `NCU` (in `conv_engine`, default 64) sets the number of filters computed
  at once, and the length of the pipeline and of the weight sequence.
  Passes shorter than `NCU` cycles are padded with idle slots.
* `DEPTH` (default 448) sets the bank size. `ADDR_W` in `cnn_pkg` must
  cover it; it allows up to 512 words.
* `OUT_SHIFT` sets the fixed-point position of the output conversion.
* The configuration field widths in `cnn_pkg` (`DIM_W`, `CH_W`, `ROW_W`)
  bound the layer sizes: up to 255 wide and 1023 channels or filters.
