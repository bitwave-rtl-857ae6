# BitWave: a bit-column-serial accelerator in SystemVerilog

Most int8 weights in a trained network are small. Written in sign-magnitude
form, a small weight has zeros in its upper magnitude bits. Take eight weights
that meet the same eight activations, one weight per input channel, and stack
their bits. The upper **bit columns** of that stack are often all zero. BitWave
stores only the non-zero columns. It then computes one column per clock cycle:

    sum_i w_i * a_i  =  sum over stored columns j of  2^j * ( sum_i sign_i * bit_ij * a_i )

The inner sum needs eight AND gates, a conditional negation and an adder tree.
All bits of a column share the significance `2^j`, so a column needs one
shift, not eight. A zero column costs no storage and no cycle. A group of
dense int8 weights takes seven column cycles, one per magnitude bit (the
sign column is only loaded). A group whose weights are all below 8 in
magnitude takes at most three.

This RTL puts 512 such engines (4096 one-bit multipliers) side by side. It
adds everything they need around them: the index decoder, the buffers, the
address generators, the routing for six array shapes, and a sequencer.

## Compressed weight format

Weights are kept in groups of 8 (one kernel `k`, eight input channels
`8cg..8cg+7`, one kernel position `fy, fx`). Each group has an 8-bit
**zero-column index**:

* Bit 7 is set when any of the eight weights is negative, so the sign column
  must be read.
* Bits 6..0 are set for each magnitude column that holds a 1.

For bigger groups the compiler can share one index byte between 2 or 4
neighbouring groups (`col` = COL16 / COL32). The shared byte is the OR of
their columns. This saves index bits and costs a few extra zero columns.

In one *step* (one channel block, one kernel position) up to 128 groups are
active at once. The Cu·Ku/8 weights of one output tile need:

| line | contents | where |
|---|---|---|
| index line | 128 index bytes, byte `p` for parser `p` | one full 16-bank row of the activation/index buffer, row `idx_base + step` |
| sign line (optional) | 8 sign bits per group, group `g` at bits `8g..8g+7` | next weight line |
| column line `n` | for every group, its `n`-th stored column (lowest significance first), or zeros if the group has fewer | following weight lines |

So a step reads `max_g nz(g)` column lines. The groups advance together. A
group with fewer columns sits idle once its own columns run out. Weight lines
of a tile are consecutive from `w_base`.

With **dense mode** there is no index at all. Every parser walks columns
`0..prec-2` and always reads the sign line. This suits weights quantised to
fewer bits, where the columns are known in advance.

## Datapath of one engine (BCE)

`smm` forms `0`, `+a` or `-a` (9 bits, two's complement) from one weight bit,
its sign and one activation. `bce` adds the eight products, shifts the sum
left by the column index, and adds it to a 32-bit accumulator. All of this
happens in one cycle. `clr` (start of a tile) wins over `en`.

A sign-magnitude magnitude path would need an 8-bit magnitude to hold
|-128|. This design skips that by negating the sign-extended two's complement
activation directly.

## The parser array (ZCIP)

`zcip_array` holds 128 `zcip_parser`s. On `load`, each parser does four
things:

* It takes its index byte. Parser `p` uses byte `p >> col`.
* It keeps the seven column bits.
* It raises a sign request if bit 7 is set.
* It counts the set column bits.

The array outputs two values:

* `sync_cnt`: the largest count over the active parsers. This is the number
  of column cycles of the step.
* `any_sign_rqst`: whether the sign line must be read at all.

On `sign_load`, a parser that requested the sign takes its 8 sign bits.
Every other parser clears them. Each `advance` drops the lowest remaining
column. The parser outputs:

* `shift`: the index of its current column.
* `col_valid`: low once its columns are used up.

## Spatial unrolling: how 512 engines are shaped

The array is reconfigured per instruction into `Cu x OXu x Ku` (input
channels x output columns x kernels):

| SU | Cu | OXu | Ku | weight bits per column line | activation bits per step |
|---|---|---|---|---|---|
| SU1 | 8 | 16 | 32 | 256 | 1024 |
| SU2 | 16 | 8 | 32 | 512 | 1024 |
| SU3 | 32 | 4 | 32 | 1024 | 1024 |
| SU4 | 8 | 1 | 128 | 1024 | 64 |
| SU5 | 16 | 1 | 64 | 1024 | 128 |
| SU6 | 32 | 1 | 32 | 1024 | 256 |

Engine `b = ((ox*Ku + k)*Cu/8 + cg)` computes the channel slice `cg` of
output `(ox, k)`.

* **Activations.** The 64-bit activation segment `(ox, cg)` is unicast to
  the Ku engines of that output column.
* **Weights.** Weight group `g = k*Cu/8 + cg`, with its column bits, signs
  and shift, is broadcast to the OXu engines that share it.

SU1 to SU3 suit wide, shallow layers. SU4 to SU6 suit deep layers and fully
connected layers, where there is only one output column.

With Cu = 16 or 32, each output is spread over 2 or 4 engines.
`inter_bce_acc` adds those engines in a pair/quad adder tree. It then
requantises each sum: an arithmetic right shift by `out_shift`, then
saturation to int8.

## Memory layout and bank rules

Both buffers are 16 banks x 64 bits x 2048 rows (256 KB each). A *segment*
address `s` means bank `s[3:0]` and row `s >> 4`.

* **Activations** use a C·H·W·Cu layout. One segment holds the eight
  channels `8cg..8cg+7` of one pixel. Eight-channel planes lie `stride_c`
  segments apart, and rows lie `stride_y` apart. A step reads segment
  `(ox, cg)` from `act_addr + cg*stride_c + ox*stride_x`, with one address
  per bank.
* **Weight lines** use `nb = Cu*Ku/64` banks. Line `L` sits in banks
  `(L mod 16/nb)*nb .. +nb-1` of row `L div (16/nb)`. So narrow lines pack
  several to a row, and a wide (1024-bit) line takes a whole row.
* **Outputs** are written as segment `(ox, kg)` to
  `out_base + kg*out_stride_c + ox`, in the same layout the next layer reads.

All segments of one access must fall in different banks. Assertions in the
fetcher and in the accumulator check this. The compiler must choose strides
that keep the banks apart, for example:

| rule | when |
|---|---|
| `stride_x = 1` | SU1 to SU3 |
| `stride_c ≡ 8 (mod 16)` | Cu = 16 |
| `stride_c ≡ 4 (mod 16)` | Cu = 32 |
| `out_stride_c ≡ 4 (mod 16)` | SU1 to SU3 |
| `out_stride_c ≡ 1 (mod 16)` | SU4 to SU6 |

## Instructions and timing

One instruction (`bitwave_pkg::instr_t`) computes one output tile of
`OXu x Ku` outputs, output-stationary. Its fields:

* `su`, `col`, `dense`, `prec`
* the loop counts `n_ct` (channel blocks), `n_fy` and `n_fx` (kernel)
* `act_base`, `stride_c`, `stride_y`, `stride_x`
* `idx_base`, `w_base`
* `out_base`, `out_stride_c`, `out_shift`
* `last`

`top_controller` clears the accumulators, then loops over `ct` (outermost),
then `fy`, then `fx`. Each step runs these phases:

| phase | cycles |
|---|---|
| read index line + load parsers | 2 (1 in dense mode) |
| read activation line into the dispatcher registers | 2 |
| read sign line | 2, only if requested |
| column cycles, one weight line per cycle, reaching the engines one cycle after its read | `sync_cnt` |
| step bookkeeping | 1 |

After the last step, the tile is written back one 1024-bit line per cycle.
That is 4 lines for SU1, 2 for SU2 and 1 for SU3 to SU6. Fetching an
instruction costs 2 cycles. The end-to-end testbench checks this cycle count
exactly.

Steps are not overlapped: the next index and activation lines are not fetched
during the current column cycles. This costs 5 to 7 cycles per step that a
pipelined version would hide.

## What the lock step costs

All active groups of a step wait for the group with the most columns. With
SU1 to SU6, 32 to 128 groups are active at once, so one busy group sets the
pace. `tb_workload_layers` shows the effect. It draws bell-shaped weights
(most magnitudes below 16, a few up to 32) and runs one tile each of four
layer shapes:

* a ResNet18 3x3 layer, 64 channels, SU1;
* a ResNet18 3x3 layer, 512 channels, SU6;
* a MobileNetV2 1x1 layer, 96 channels, SU4;
* a Bert-Base fully connected layer, 768 inputs, SU5.

In every case it needs about 5 column cycles per step where dense weights
need 7, a saving of 1.4x. With this step timing, the fixed 5 to 7 cycles per
step are then about as large as the column cycles themselves. Larger savings
need two things:

* weights whose upper columns are empty across a whole group set. The
  offline bit-flip optimisation that goes with this architecture aims at
  exactly that.
* overlapping the step overhead with computation.

## Outside view

`bitwave_top` exposes a host port:

* `host_*`: 64-bit segment reads and writes into either buffer, allowed only
  while `busy` is low.
* `im_*`: instruction writes.
* `start`, `busy` and `done`: run control.
* `stat_*`: counters of steps, column cycles and sign lines, useful for
  measuring sparsity gains.

The host port stands in for the DRAM and IO path, which is not modelled.

## Where this RTL departs from the published design

* **SU7 (depthwise, 64 groups x OXu 2) is not implemented.** The dispatcher
  gives no enables for it, and the controller asserts on it.
* **Requantisation, the instruction format, the host port, the bank
  placement rules and the step timing are this design's own.** The
  published description does not give them.
* The **Bit-Flip** weight optimisation is an offline software step. It is not
  hardware and is not included.
* The index-sharing rule for column sizes 16/32 is one reasonable reading:
  one byte per 2 or 4 adjacent groups.
* The one-bit multiplier negates a two's complement activation. It does not
  use a magnitude path, so -128 needs no special case.
* All 128 parsers advance in lock step. This follows from a single sync
  counter per step. How groups with fewer columns are handled is this
  design's choice: they idle.
* There is no DRAM controller. Layers larger than the buffers must be split
  into tiles and loaded through the host port between runs.
* SU7 would need the depthwise routing spelled out. With 64 groups x 2
  outputs there are 4 engines per output, but only 64 weight bits per cycle.
  The text does not say what fills the eight multipliers of an engine in
  that mode.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The main ones:

* `tb_bitwave_top` runs the full-size design (512 engines, 2 x 256 KB) with
  no parameter overrides. It builds random layers, compresses the weights as
  above, and loads everything through the host port. It runs programs in
  every SU, all three column sizes, dense mode and multi-tile programs. It
  compares every output with a reference convolution, the cycle count with
  the timing formula above, and the statistics counters with the
  compression.
* It also counts each mechanism and fails if one never happens. The
  mechanisms: each SU, each column size, dense mode, read and skipped sign
  lines, all-zero steps, uneven column counts, inter-engine sums, saturation,
  multi-instruction programs.
* `tb_workload_layers` runs the layer tiles described above, checked the same
  way.
* The unit testbenches check:
  * the multiplier exhaustively;
  * the engine, the parser array, the dispatcher (all SU routes), the
    fetcher and the accumulator against independent models;
  * the controller's loop addresses and cycle count.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_bitwave_top \
        rtl/bitwave_pkg.sv $(ls rtl/*.sv | grep -v bitwave_pkg) \
        tb/tb_bitwave_top.sv -o simv
    ./obj_dir/simv

The package has to come first on the command line. `-Wno-fatal` keeps the
width and unused-signal lint notes from stopping the build.

Replace the top module and testbench file to run a unit test. The
full-size end-to-end test compiles in under a minute and runs in well under
a second.
