# CIMPool core: one fixed weight pool, one small error array, and a crossbar-free permuter

An SRAM compute-in-memory (CIM) array performs a whole vector-matrix product in one
step. It costs area, though, so a chip can usually hold only a small network in it.
CIMPool avoids storing the real weights. It keeps one fixed pool of 128 random binary
(+1/-1) vectors, each 128 long, in a single 128 x 128 CIM array. Every 128-long slice
of every filter in the network is written as:

* one pool vector, named by an index, plus
* a 1-bit error vector, pruned in a fixed pattern so that only every second input
  channel keeps an error bit.

The network then lives in an ordinary storage SRAM as 5 index bits plus 64 error bits
per 128-weight vector (69 bits instead of 1024 at 8 bits). Compute needs only two CIM
arrays:

* the weight-pool array, programmed once;
* a 64 x 128 error array, rewritten for every tile.

For each filter f and input vector I the core computes

    O[f] = MAV_W * (I . pool[column(f)])  +  S * MAV_E * (I . err[f])

MAV_W and MAV_E are per-layer mean-absolute-value scales. S is an extra error scale
that grows with the pruning.

The price is a permutation. Filter f is computed by whichever pool column it was
assigned to, so the weight-pool array delivers its outputs in a scrambled order. The
next layer needs its channels in natural order. The *hardware scheduler* restores that
order with selectors and a small buffer instead of a 128 x 128 crossbar. This is the
least obvious part of the design, and it gets the most room below.

This repository is synthesizable SystemVerilog for that core. Where the published
description stops at a block's name or function, the block is implemented in the
simplest way that does the job, and the departures are listed at the end.

## Data path at a glance

```
            host ports (weight pool, index/error words, activations)
                 |                         |
      +----------v----------+    +---------v---------+
      |  error/index SRAM   |    |  activation SRAM  |<-------------------+
      |  idx word / tile    |    |  act bank (8-bit) |                    |
      |  64 error rows/tile |    |  psum bank (24-b) |<---+               |
      +--+------------+-----+    +---------+---------+    |               |
   index |   error rows|                   | pixel word   |               |
         |      +------v-------------------v------+       |               |
         |      |          input buffer            |      |               |
         |      |  zero-pad, bit-serial MSB first  |      |               |
         |      +---+--------------------------+---+      |               |
         |    128 bits/cycle             64 bits/cycle    |               |
         |  +--------v--------+        +--------v------+  |               |
         |  | weight-pool CIM |        |   error CIM    | |               |
         |  |  128 x 128, ADC |        |  64 x 128, ADC | |               |
         |  +--------+--------+        +--------+-------+ |               |
         |  +--------v--------+        +--------v-------+ |               |
         |  |  shift & add    |        |  shift & add   | |               |
         |  +--------+--------+        +--------+-------+ |               |
         |  +--------v--------+                 |         |               |
         +->| hw scheduler    |                 |         |               |
            | (un-permute)    |                 |         |               |
            +--------+--------+                 |         |               |
            +--------v--------------------------v-----+   |  +------------+----+
            |              accumulator                 +--+->| activation &    |
            |  MAV_W*wp + S*MAV_E*err + old psum       |      | pooling (ReLU,  |
            +------------------------------------------+      | max, 8-bit)     |
                                                              +-----------------+
```

A controller runs the sequence. Module names:

| Block | Module |
|---|---|
| weight-pool and error CIM arrays | `cim_array` |
| shift & add | `shift_add` |
| hardware scheduler | `hw_scheduler` |
| input buffer | `input_buffer` |
| accumulator | `accumulator` |
| activation & pooling | `act_pool` |
| activation SRAM | `activation_sram` |
| error/index SRAM | `error_index_sram` |
| controller | `controller` |
| whole core | `cimpool_top` |

Shared sizes and types are in `cimpool_pkg`.

## Mapping a layer onto tiles

The dataflow is weight-stationary. A *tile* binds:

* one kernel position (x, y),
* a block of up to 128 input channels (array rows),
* a block of 128 filters (array columns).

The tile stays in the arrays while every input pixel that uses it streams through.
A layer with C_in inputs, C_out filters and a k x k kernel therefore takes
ceil(C_in/128) x ceil(C_out/128) x k^2 tiles. The partial sums of all tiles that feed
the same outputs are added in the partial-sum bank. A tile with fewer than 128 real
input channels gets zeros on its unused rows.

Each tile occupies, in the error/index SRAM:

* **index word** (address = tile number): 128 five-bit indices. `idx[f]` is the
  position, inside filter f's group of 32 columns, of the pool column that computes
  filter f. A filter may only use a column of its own group (weight-pool grouping),
  and no two filters of a group share a column.
* **error rows** (addresses tile*64 .. tile*64+63): row r holds the 1-bit errors
  (1 = +1, 0 = -1) of input channel 2r for all 128 filters, in natural filter order.
  Channels 2r+1 are pruned, and the input buffer never feeds them to the error array.

The host programs the weight pool once, through `wp_wr_*`. It writes index and error
words (`idx_wr_*`, `err_wr_*`) and activations (`host_act_*`), then issues one
command per tile.

### The tile command (`cimpool_pkg::tile_cmd_t`)

| field | meaning |
|---|---|
| `tile` | tile number in the error/index SRAM |
| `n_pix` | number of input vectors (output pixels) to stream |
| `in_base`, `in_stride` | activation word of pixel p is `in_base + p*in_stride` |
| `psum_base` | partial-sum word of pixel p is `psum_base + p` |
| `out_base` | activation word of the first (pooled) output |
| `n_chan` | real input channels in this tile (rows above are fed zero) |
| `first` / `last` | first tile of these outputs (old partial sum taken as 0) / last tile (activate, pool, store) |
| `sa_shift` | right shift that brings the shift-and-add sum to 8 bits |
| `mav_w`, `mav_e`, `s_err` | integer scales MAV_W, MAV_E and S |
| `act_shift` | requantisation shift before the 8-bit activation |
| `pool_n` | consecutive output pixels max-pooled into one (1 = none) |

The handshake is `cmd_valid`/`cmd_ready`. `done` pulses once the last pixel of the
tile has been written. While `cmd_ready` is high the host owns the activation SRAM's
ports; during a tile the controller and the accumulator own them.

## Controller sequence and timing

Per command the controller runs `C_LOAD_IDX -> C_LOAD_ERR -> C_STREAM -> C_FLUSH ->
C_DRAIN` and returns to `C_IDLE`.

1. **Load index.** It reads the index word (1-cycle SRAM) and loads it into the
   scheduler.
2. **Reload errors.** It reads the 64 error rows, one per cycle. Each row goes through
   the input buffer into the error array. This stalls the arrays for about 64 cycles
   per tile, which is small next to the pixel stream of a weight-stationary tile.
3. **Stream pixels.** It reads one activation word whenever the input buffer's shadow
   register is free. The input buffer is double-buffered: the next word loads while
   the current one is shifted out, so the arrays see one bit-plane per cycle without
   gaps. One *input cycle* is 8 clock cycles.
4. **Flush.** When every pixel has left the shift-and-add units, a partly filled
   scheduler bank is launched with its empty slots masked.
5. **Drain.** The controller waits until the accumulator has finished `n_pix` pixels,
   then pulses `done`.

Latencies of the arrays and shift-and-add units:

* A bit-plane reaches the ADC outputs one cycle after it is applied.
* Shift-and-add consumes the 8 planes MSB first and emits a result the cycle after
  the last plane.
* The weight-pool and error paths run in lock-step, which an assertion in the top
  checks.

A tile of n pixels takes about `8n + 64 + 4*32 + a few` cycles. Throughput is one pixel
per input cycle; the scheduler is never the bottleneck (see below).

## The hardware scheduler

### The problem

In every input cycle the weight-pool array yields 128 outputs. They are in column
order, and the output of filter f sits at column `g*32 + idx[f]`, where g is f's
group. Putting them back in filter order in one cycle needs a full 128-way crossbar of
8-bit lanes. Reading them one by one from a buffer needs 128 cycles per vector, far too
slow.

### How it is solved here

Three observations make a cheap, full-rate permuter.

1. **Grouping.** A filter of group g only ever lives in a column of group g. The four
   32-column groups can therefore be un-permuted side by side, each with its own
   32:1 selector. A vector now takes 32 steps instead of 128.
2. **Bit-serial inputs.** A new output vector appears only once per input cycle
   (8 clocks). So while one vector is read out over 32 steps, 32/8 = 4 further vectors
   arrive.
3. **Weight-stationary.** All vectors of one tile use the same assignment. One index
   per step can therefore steer the selectors of all 4 buffered vectors at once.

### The buffer

`hw_scheduler` keeps two banks (ping-pong). Each bank holds K = 32/8 = 4 vectors of
128 eight-bit outputs, so the whole buffer is 2 x 4 x 128 bytes = 1 KB. A bank fills
over 4 input cycles, one vector per `in_valid`, and is then *launched*.

### Read-out

For t = 0..31, step t reads, for every slot k and group g,

    out_data[k][g] = buf[bank][k][g*32 + idx[g*32 + t]]

That is filter g*32+t of vector k. The selector address `idx[g*32+t]` is shared by
the 4 slots. After 32 steps all four vectors are back in filter order. By then the
other bank has just filled, because 4 vectors x 8 cycles = 32 cycles. The permuter
keeps pace with the arrays on average, with no stall.

### Timing

The first permuted output appears `(K-1)*8 + 2` clock cycles after the first vector
enters the buffer (26 cycles at the default sizes). Without grouping and bit-serial
inputs, 128 vectors would have to be collected first.

### End of a tile

A tile's pixel count need not be a multiple of 4. At the end of the tile `flush`
launches the partly filled bank, and `out_mask` marks the valid slots. A new bank may
launch in the same cycle the previous read-out ends. If a vector ever arrived with
both banks busy, the sticky `overflow` flag would rise; an assertion forbids this. It
cannot happen at full rate, because a bank takes exactly as long to drain as to fill.

### The error path

The error path needs no permutation: its rows are stored in natural filter order. Its
vectors, however, come out of shift-and-add 4 to 8 input cycles before the matching
permuted weight-pool vectors. The scheduler therefore exports the bank and slot
(`wr_bank`, `wr_slot`) each incoming vector goes to. The accumulator files the error
vector of the same pixel in a buffer of the same shape. When the scheduler finishes a
bank (`out_last`), the accumulator has both halves of 4 pixels. It then finishes them
one per cycle:

* read the old partial sum;
* add `mav_w*wp + s_err*mav_e*err`;
* write the sum back, and on the last tile pass it to activation and pooling.

## Other blocks

* **`cim_array`** is a behavioural but synthesizable model of the analog macro:
  * Cells store 1 = +1 and 0 = -1.
  * A column's ADC code is the signed sum of the cells on the active word lines,
    saturated to 8 bits, registered once.
  * The same module serves as the 128 x 128 weight pool and as the 64 x 128 error
    array.
* **`shift_add`** forms `acc = 2*acc + adc` over the 8 planes, MSB first. It then
  shifts the 8-bit-input column sum right by `sa_shift` and saturates it to a signed
  byte, the word width the scheduler buffer stores.
* **`input_buffer`**:
  * zeroes channels at and above `n_chan`;
  * sends bit b of every channel to the weight-pool array;
  * sends bit b of channels 0, 2, 4, ... to error-array rows 0, 1, 2, ...;
  * passes error rows from the error/index SRAM to the error array's write port.
* **`act_pool`** applies ReLU, then an arithmetic right shift by `act_shift`, then
  saturation to an unsigned byte. It takes the channel-wise maximum over `pool_n`
  consecutive pixels and writes the result at `out_base + n`. The host orders the
  pixels (through `in_base`/`in_stride` and the tile split) so that consecutive
  pixels form a pooling window.
* **`activation_sram`** has an 8-bit activation bank (16384 words of 128 channels) and
  a 24-bit partial-sum bank (16384 words of 128 filters). Each bank has one read and
  one write port, with 1-cycle reads.
* **`error_index_sram`** has an index bank (1024 words x 128 x 5 bits) and an error
  bank (65536 rows x 128 bits). It has host write ports and 1-cycle reads.

## Sizes

| parameter | default | origin |
|---|---|---|
| `ROWS`, `COLS` | 128, 128 | published design |
| `GROUP_SIZE` | 32 (5-bit index) | published design |
| `ACT_BITS` | 8 | published design |
| `OUT_W` | 8 (scheduler word) | published design |
| `ERR_ROWS` | 64 (0.5 error sparsity, the main configuration) | published design |
| `ADC_W` | 8 | this design |
| `PSUM_W` | 24 | this design |
| `TILE_DEPTH` | 1024 tiles | this design |
| `ACT_DEPTH`, `PSUM_DEPTH` | 16384 words each | this design |

Sparsity 0.75 or 0.875 is a build with `ERR_ROWS` = 32 or 16. No pruning is
`ERR_ROWS` = 128. The input buffer feeds every (ROWS/ERR_ROWS)-th channel to the error
array. The tests exercise a ratio of 2 only (at the default and at reduced
sizes); the other ratios are untested.

Model capacity at the defaults, counted from the standard layer lists:

* ResNet-18 needs 766 tiles, so it fits in the 1024 tiles.
* ResNet-34 needs 1396, so it must be reloaded through the host ports between layers,
  or built with `TILE_DEPTH = 2048`.

Activation capacity at the defaults:

* The activation bank holds a 128 x 128-pixel map, the largest intermediate map of
  ResNet-18 at a 256 x 256 input.
* A 256 x 256 input image (65536 one-pixel words) must be supplied in strips.

At the defaults the core has about 76 Mbit of memory arrays and 13.5 k flip-flops of
logic state.

## Departures from the published design, and what is assumed

* **ADC.** It is ideal and linear: an exact column sum, saturated to 8 bits. No
  non-idealities, calibration or sharing are modelled.
* **Scheduler word.** The 8-bit word is produced by a programmable right shift and
  saturation. The source only assumes 8-bit CIM outputs, without saying how they are
  formed.
* **Scale factors.** MAV_W, MAV_E and S are small unsigned integers, applied once
  per output in the accumulator. Folding in real-valued scales is left to the
  requantisation shift.
* **Partial sums.** The partial-sum bank and its 24-bit width are this design's own.
  The source only says that layers wider than 128 channels take several passes.
* **Error alignment.** The error-alignment buffer in the accumulator (2 x 4 x 128
  bytes) is this design's own way of pairing the error output with the delayed,
  permuted weight-pool output.
* **Error reload.** The error array is reloaded in series before each tile, not
  overlapped with computation.
* **Activation and pooling.** The source only names this block. ReLU plus 1-D max
  pooling over consecutive pixels was chosen; 2-D window addressing, average pooling
  and residual additions are left to the host.
* **Controller.** Its command interface, state machine and host ports are this
  design's own. The source names a controller and shows the data paths only.
* **Depths.** All memory depths are choices, sized for ResNet-18 as above.
* **Index path.** The published block diagram draws only the path from the
  error/index memory into the input buffer. The index word goes straight to the
  scheduler here, since the scheduler is where the indices are used.
* **Not modelled.** Off-chip DRAM and any system bus are outside the core.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares against values
computed independently in the testbench and ends by printing
`TB_RESULT checks=<n> failures=<m>`. A watchdog ends any run that hangs.

| testbench | what it checks |
|---|---|
| `tb_cim_array` | random weights and bit-planes against a column-sum model, saturation, latency |
| `tb_shift_add` | 8-plane accumulation, shift, saturation, output timing |
| `tb_hw_scheduler` | random in-group permutations restored; fill latency; back-to-back banks; flush of partial banks |
| `tb_input_buffer` | bit order, zero padding, error-channel selection, error-row path |
| `tb_accumulator` | scaled sum, first/last tiles, partial-sum read-modify-write, bank/slot alignment |
| `tb_act_pool` | ReLU, shift, saturation, max pooling, addresses |
| `tb_activation_sram`, `tb_error_index_sram` | write/read of random words in both banks |
| `tb_controller` | state sequence, addresses, flush and done timing, against a modelled datapath |
| `tb_cimpool_top` | end-to-end at reduced sizes (32 x 16 array, groups of 8, 4-bit inputs, 16 error rows) |
| `tb_cimpool_full` | end-to-end at the default sizes, with no parameter overrides |
| `tb_resnet18_layer3` | a ResNet-18 third-stage 3 x 3 conv (256 -> 256 channels, 2 x 2 map with zero border) at default sizes: 18 tiles per output block accumulated, every partial sum checked |

### End-to-end tests

Both end-to-end tests share `tb_cimpool_body.svh`. They:

* program a random weight pool;
* create random tiles with random in-group permutations;
* run multi-tile accumulation with padding and pooling;
* compare every stored activation and partial sum against a reference model of the
  arithmetic.

They also check the tile cycle count against the one-pixel-per-input-cycle rate, and
the scheduler's `(K-1)*ACT_BITS + 2` buffer-filling latency. They count each
mechanism and fail if any never occurred:

* error-array reloads;
* partial-bank flushes;
* partial-sum accumulation;
* pooling;
* zero padding;
* permutation.

`tb_cimpool_full` passes 1300 checks with 2 tiles of 10 pixels at 128 x 128.
`tb_cimpool_top` passes 572 checks. `tb_resnet18_layer3` passes 9767 checks over
36 tile commands.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cimpool_pkg.sv \
          tb/tb_cimpool_top.sv -y rtl --top-module tb_cimpool_top
./obj_dir/Vtb_cimpool_top
```

Substitute any other testbench name. The full-size test takes about half a minute to
compile and well under a second to run.
