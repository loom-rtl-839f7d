# Loom: a bit-serial CNN tile whose speed follows weight and activation precision

A conventional CNN accelerator multiplies 16-bit activations by 16-bit weights
in parallel, so a layer that only needs 9-bit activations and 11-bit weights
runs exactly as fast as one that needs all 16 bits. Loom turns both operands
into bit streams. A product of a `Pa`-bit activation and a `Pw`-bit weight
costs `Pa x Pw` single-bit steps, so a convolutional layer runs up to
`256 / (Pa x Pw)` times faster than a 16-bit parallel engine with the same
number of multiplier bits. In a fully connected layer each weight is used
only once, so only the weight precision helps: the speed-up is `16 / Pw`.
The lost per-unit throughput is made up by running many units side by side.
These units reuse weights across windows and activations across filters, so
the memory interface is no wider than the parallel engine's: 2 Kbit of
weights and 256 bits of activations per cycle.

This repository holds synthesizable SystemVerilog for one Loom tile in its
main configuration. It has 128 x 16 serial inner-product units (SIPs). Each
SIP handles one activation bit per cycle (the "1-bit" variant). At 16-bit
precision the tile matches a parallel engine doing 128 16x16-bit
multiply-accumulates per cycle. The weight memory and the activation memory
are outside the RTL; the testbenches model them.

## Arithmetic: how a bit-serial inner product is formed

For a set of 16 inputs, a SIP computes `sum_l w_l * a_l`. Weights are
two's complement with `Pw` bits, and activations are unsigned with `Pa` bits
(they follow a ReLU). Write the weights as bit planes:

    w_l = -2^(Pw-1) * w_l[Pw-1] + sum_{b<Pw-1} 2^b * w_l[b]

Then the inner product is

    sum_b  s_b * 2^b * sum_i 2^i * popcount_l( w_l[b] & a_l[i] )
    with s_b = -1 for the sign plane and +1 otherwise.

The hardware follows this formula from the inside out:

* **WR + AND + adder tree.** The 16 weight registers hold one bit plane `b`
  of 16 weights. Each cycle the SIP ANDs them with one bit `i` of its 16
  activations and counts the ones (a 16-input, 1-bit adder tree, 0..16).
* **AC1** adds these counts over the activation bits, most significant bit
  first: `acc1 <= (acc1 << 1) + count`. After `Pa` cycles it holds
  `sum_i 2^i * popcount(...)` for one weight plane.
* **Negation.** On the sign plane the AC1 result is subtracted.
* **AC2 / OR** folds the AC1 result into the output register. It also runs
  most significant plane first: `OR <= (OR << 1) + x`.

The AC1 result is taken one cycle after its last bit, so AC1 can start the
next group at once. The output register is 48 bits wide.

### Outputs with more than 16 inputs

A real layer has hundreds or thousands of inputs per output, so one output
covers many sets of 16. Shifting OR by one bit per weight plane works only
if every set has finished a plane before any set starts the next. The
controller therefore loops **weight plane outermost, sets inside**:

    for b = Pw-1 downto 0:            -- sign plane first
      for s = 0 .. n_sets-1:
        load plane b of set s's weights into WR (one cycle, overlapped)
        stream set s's activations, Pa bits, MSB first, through AC1
        AC2: LOAD      if b = Pw-1 and s = 0    OR <= x
             SHIFT_ADD if s = 0                 OR <= 2*OR + x
             ADD       otherwise                OR <= OR + x

The activation memory streams each set `Pw` times, once per weight plane.
The bandwidth is still 256 activation bits per cycle, because every cycle
uses one bit of each of the 256 lanes. The weight memory supplies one
2-Kbit plane per group.

## The tile

```
          activation memory (bit planes, 256 b/cycle)
                     |
                  +--v---+  shadow -> current -> previous banks,
                  | abin |  run-time precision of the shadow group
                  +--+---+
       16 x 16 b     |  one 16-bit activation bus per column
 weight   +----------v-----------------------------+
 memory ->| sip_array: 128 rows x 16 columns       |<- loom_ctrl (per-column
 2 Kb     |  row r: 16-bit weight bus, filter r    |   control, weight plane
          |  SIP(r,c) i_nbout <- SIP(r,c-1) OR     |   request, ABin swap)
          +----------+-----------------------------+
                     | 2048 results
                  +--v----+     +-----+     +------------+
                  | about |---->| afu |---->| transposer |--> 16 bit planes
                  +-------+ 16  +-----+ 16  +------------+    per cycle
```

| module        | role |
|---------------|------|
| `loom_pkg`    | sizes (`ROWS=128, COLS=16, LANES=16, PBASE=16, OR_W=48`), layer mode, AC2 operation, column control and configuration structs |
| `sip`         | one serial inner-product unit (as above), plus cascade input, pooling max and output shifter |
| `sip_array`   | the grid; row-shared weight buses, column-shared activation buses and control, left-to-right neighbour chain |
| `dyn_prec`    | one OR tree per bit position over 256 activations, then a leading-one detector |
| `abin`        | input activation buffer, filled one bit plane per cycle |
| `loom_ctrl`   | the sequencer for both layer types, cascading and stalls |
| `about`       | output buffer: takes all 2048 results in one cycle and drains 16 per cycle |
| `afu`         | ReLU, right shift to the activation fixed point, saturation to 16 bits |
| `transposer`  | 16 activations to 16 bit planes, the layout the activation memory keeps |
| `loom_top`    | the tile |

## Convolutional and fully connected layers

**Convolutional layers (CVL).** Row `r` holds filter `r`; column `c` holds
window `c`. Each group begins with one weight plane loaded into every WR of
a row in the same cycle. All columns then run in lockstep for `Pa` cycles,
each on its own window's activations. A tile of 128 filters x 16 windows
with `n_sets` sets of 16 inputs takes

    Pw * n_sets * Pa + 2 cycles   (start to done, memories keeping up)

against `256 * n_sets` for the 16-bit parallel engine.

**Fully connected layers (FCL).** There is no weight reuse across windows.
Each SIP computes a different output from the same input activations. A group
always lasts 16 cycles, one per activation bit. The 16 columns are staggered
by one cycle: column `c` runs exactly column 0's control delayed by `c`
cycles. A 16-deep register chain in `loom_ctrl` holds that delayed control.
As a result, exactly one column loads a weight plane in any cycle, and all
columns are busy after 15 cycles. Since column `c` may still work on the
previous group for up to 15 cycles, ABin keeps the previous group as well. A
generation tag tells each column which bank to read. A tile of 2048 outputs
takes

    16 * Pw * n_sets + 16 + sn cycles

with `sn` the number of cascade slices (1 without cascading).

**Cascading (FCL only).** A layer may have too few outputs to give every SIP
one, for example 1024 outputs for 2048 SIPs. In that case, groups of `sn`
neighbouring columns share an output. Each column of a slice takes a
different share of the inputs: column `c` handles input sets
`s*sn + (c mod sn)`. After the last group, `sn-1` cascade steps run, and in
step `j` the columns with `c mod sn = j` add their left neighbour's OR. The
complete result ends in the last column of each slice. `sn` may be 1, 2, 4,
8 or 16.

**Max pooling.** With `pool` set, every SIP outputs the larger of its own OR
and its left neighbour's OR (column 0 compares with zero). Only this pairwise
max with one neighbour is built.

## Run-time activation precision

The activation precision need not be fixed per layer. With `dyn_en`, ABin
computes, for each group of 256 activations, the highest bit position holding
a one across the group. That position plus one becomes the group's length in
cycles (at least 1). The detection runs on the shadow bank, including any
plane written in the same cycle, and is latched when the group is swapped in.
Groups of small values therefore finish early. They only save time if the
activation memory can deliver the next group that fast: the memory model
here writes every plane up to the profile precision, so a trimmed group
stalls until the next group is complete.

## Interfaces and timing

All state is reset asynchronously by `rst_n` (active low). Storage that is
always written before it is read (the ABout data) has no reset.

* **Configuration** (`cfg_t`, taken at `start` while idle): `mode` (CVL or
  FCL), `pw` (1..16), `pa` (1..16, CVL), `dyn_en`, `n_sets` (1..2047),
  `sn`, `pool`, `prec` (SIP output left shift, 0..15), `afu_shift`.
  `busy` is high from `start` to `done`, and `done` pulses for one cycle
  when the results have been copied into ABout.
* **Weight memory.** When `w_req_valid` is high, the tile needs bit plane
  `w_req_plane` of set `w_req_set` for the columns in `w_req_mask`. The
  memory must answer in the same cycle on `w_bits[r][l]`. In a CVL all
  columns load the same plane. In an FCL exactly one column loads, and the
  weight for row `r` is then that of output `r + 128*(c / sn)`.
* **Activation memory.** It pushes bit planes on `a_wr_valid / a_wr_ready`:
  `a_wr_bits[16*c + l]` is bit `a_wr_plane` of lane `l` of slot `c`, and
  `a_wr_last` marks the last plane of a group. Planes that are not written
  are zero. In a CVL, slot `c` is window `c` of the current set. In an FCL,
  slot `j` is input share `j`, and only slots `0..sn-1` are read. Groups
  must arrive in the controller's order: weight plane outermost, sets
  inside. A group counts as complete in the cycle its last plane arrives, so
  a memory that keeps one plane per cycle ahead never stalls the array.
* **Stalls.** The whole array freezes (`stall` high) when a group boundary
  arrives with no complete group in ABin. It also freezes when a tile ends
  while ABout still holds undrained results from the previous tile.
* **Results.** `out_valid` carries word `out_index` as 16 bit planes of 16
  activations. Word `w` holds column `w / 8` and rows `16*(w mod 8)` to
  `16*(w mod 8)+15`. `out_ready` throttles the ABout drain.

## Where this RTL departs from the paper, or fills gaps

* **Bit order.** The SIP drawing shows AC1 and AC2 shifting left by one
  bit, so both operands are taken most significant bit first. The paper's
  worked example walks the bits least significant first.
* **Signedness.** The paper's text says the negation block supports signed
  activations. The mechanism it describes, subtracting on the weight's most
  significant bit, makes the weights signed. Here weights are two's
  complement and activations unsigned.
* **Multi-set accumulation.** The plane-outermost loop order, the three AC2
  operations and the 48-bit OR are this design's. The paper describes a
  single set of 16 inputs.
* **Cascade reduction** takes `sn-1` cycles, one column per step. It is
  built for fully connected layers only.
* **ABin organisation** (shadow, current and previous banks, bit-plane
  writes, generation tags), the **ABout** one-cycle capture with a 16-wide
  drain, the choice of **ReLU** as the activation function, the width of
  `prec`, all handshakes and the stall rules are this design's choices.
* **Not built.** The activation and weight memories (eDRAM), the
  off-chip memory, the 2- and 4-bit-per-cycle variants, per-group weight
  precision trimming, and anything beyond a pairwise max for pooling.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
integer arithmetic done in the testbench. Each one ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_sip`: random precisions 1..16 and 1..4 sets. Checks the exact value and
  the latency `Pw*Pa*sets + 1`, plus cascade, pooling, shift and stall.
* `tb_sip_array`: a 4x3 grid with a different product per SIP, then pooling
  and a two-step cascade along each row.
* `tb_dyn_prec`, `tb_afu`, `tb_transposer`, `tb_about`, `tb_abin`: unit checks
  of the buffers and datapath helpers.
* `tb_loom_ctrl`: group order, AC2 operations, CVL lockstep, the FCL
  one-cycle column lag, one weight load per cycle, cascade column selection,
  stall behaviour and exact cycle counts.
* `tb_loom_top`: the whole tile at 16 rows x 4 columns. It runs CVL tiles at
  several precisions (including 16x16 and 11x9 over 3 sets), a run-time
  precision tile that completes in `4*2*3 + 2` cycles, pooling, FCL tiles
  with and without 2- and 4-way cascading, a slow activation memory and a
  blocked output port. Every output activation and every cycle count is
  checked. It also counts stalls, swaps, cascade steps, trimmed groups and
  pooling, and fails if any of them never occurred.
* `tb_loom_workloads`: the precision profiles of six image-classification
  networks (NiN, AlexNet, GoogLeNet, VGG-S, VGG-M, VGG19). It runs 54
  convolutional layers, each at its own activation precision (4 to 13 bits)
  and its network's weight precision (11 or 12 bits), and 13 fully connected
  layers at their weight precisions (7 to 10 bits). The tile is reduced, and
  every layer is shortened to 2 sets of 16 inputs. Values and cycle counts
  are checked.
* `tb_loom_full`: the tile at its default size (128 x 16). It runs one CVL
  tile and one FCL tile with 2-way cascading, and checks all 2048 outputs and
  both cycle counts.

To run one with plain Verilator (from the repository root):

    verilator --binary --timing --assert -Irtl -Itb -y rtl \
        rtl/loom_pkg.sv tb/tb_loom_top.sv --top-module tb_loom_top
    ./obj_dir/Vtb_loom_top

The full-size tile takes under a minute to build and well under a second to
simulate. To change the array size, override `ROWS_P` (a multiple of 16) and
`COLS_P` (a power of two up to 16) on `loom_top`. Precisions and layer shapes
are run-time configuration.
