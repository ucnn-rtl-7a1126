# UCNN accelerator in SystemVerilog

Quantized CNNs use very few distinct weight values. INQ-trained networks,
for example, have 17: zero and sixteen signed powers of two. A filter with
thousands of weights therefore repeats each value hundreds of times. This
design uses that repetition in two ways:

* **Dot-product factorization.** In `sum_i a_i * w_i`, every activation
  that meets the same weight `w` is added first. The sum is then multiplied
  by `w` once. A filter with `U` distinct weights needs at most `U - 1`
  multiplies per output instead of `R*S*C`. Weight zero costs nothing.
* **Activation group reuse.** `G` filters share one table that visits the
  activations in a single order. That order is sorted so the partial sums
  of the first filter are built from the sums of the second. With `G = 2`,
  activations are sorted first by their weight in filter 1 and then, inside
  each of those groups, by their weight in filter 2. The sum over the inner
  sub-group is added once per activation. The outer group sum is built from
  the finished inner sums, so the second filter's additions are almost free.

The RTL builds the version of this accelerator with `U = 17` distinct
weights, 16-bit fixed point, and 32 processing elements (PEs). Each PE has
4 spatial lanes and 2 filters per table, which makes 8 "dense-equivalent"
multiply-accumulates per PE per cycle. It also builds a chip-level dataflow
that runs whole convolution layers out of a global buffer and an external
DRAM.

## Encoding a filter group as two tables

For each group of `G` filters and each channel tile of `R_T x S_T x C_T`
inputs (3 x 3 x 32 by default), software writes two tables:

* **iiT (input indirection table).** One entry per activation position
  `(r, s, c)` in the sorted order. Positions where all `G` filters have
  weight zero are left out.
* **wiT (weight indirection table).** One small field per entry that says
  where groups end. Bit `g < G-1` means "filter `g`'s group ends at this
  entry". The innermost filter gets two bits. They hold a count 0..3 of how
  many canonical weights its pointer moves on by. This lets the
  innermost pointer skip up to two empty sub-groups without extra entries.

Every filter steps through the unique weights in one fixed canonical order,
with zero last. It keeps a pointer into the `U`-entry weight buffer. An
outer filter's group ending implies an inner group ending. When that
happens, the inner pointers restart at the first canonical weight. The
innermost pointer then goes to `advance - 1`, so leading empty sub-groups
are skipped as well.

A weight that would need a bigger jump than the field allows gets a
**skip entry**. It is an iiT entry with its `skip` flag set, which moves
pointers but adds no activation. It costs one cycle (a bubble). The final
entry of a tile has its `last` flag set, and that closes all groups.

Table word format (16 bits): `{wiT[G:0], last, skip, r[1:0], s[1:0], c[4:0]}`.
The builder that produces these tables from a dense filter is the class
`table_builder` in `tb/ucnn_tb_pkg.sv`. It is the reference for the format.

## Processing element

```
 L1 write port (from the buses)
   |          |              |
   v          v              v
 iiT/wiT   weight buffer   input buffer (V_W banks)
   |          |  G ptrs      |  V_W words / cycle
   v          v              v
 pe_control --+-- dispatcher ---> lane 0 .. lane V_W-1
                                    group accumulators
                                    1 multiplier + 2-entry queue
                                    G partial-sum registers
                                        |
                                        v
                               psum buffer (per output row) -> ReLU/shift/saturate
```

* `ucnn_pe_control` walks the table at one entry per cycle. It decodes each
  entry into an *event*: the position to read, which filter levels flush a
  group at this entry, which of those flushes need a multiply, and the `G`
  weight pointers.
  * A flush multiplies only when the group holds at least one activation
    and its weight is not zero. Zero-weight groups are skipped.
  * A group that grows to `MAX_GROUP = 16` activations is cut into a chunk.
    That level and all inner levels are flushed and multiplied with the
    current weight, and the pointers stay where they are. This keeps the
    group-sum adders at 20 bits.
* `ucnn_input_buffer` holds `R_T + V_W - 1` columns by `S_T` rows by `C_T`
  channels. Column `j` lives in bank `j mod V_W`. The four lanes read
  columns `r .. r+3`, which always fall in four different banks, so a vector
  read never conflicts. Rows are stored circularly: output row `h` uses
  physical row `(h + s) mod S_T`. Moving to the next output row therefore
  reloads only one input row.
* `ucnn_dispatcher` rotates the four bank words into lane order. It also
  broadcasts the `G` weights to every lane.
* Each `ucnn_lane` is `ucnn_group_accum` plus `ucnn_mac_unit`.
  * The group accumulator holds one register for the innermost sub-group
    and `G - 1` registers for the outer groups. It offers each filter's
    finished group sum in the cycle its group ends.
  * The MAC unit has **one** multiplier for all `G` filters. Requests wait
    in a 2-entry queue, and one product per cycle goes into that filter's
    40-bit accumulator.
  * If an entry would push more requests than the queue can take, the
    controller stalls the walk. This is the cost of giving each lane a
    single multiplier. The stall counter reports it.
* `ucnn_psum_buffer` keeps one word per output row with all `V_W x G` partial
  sums (output stationary). After each row pass it adds the lane
  accumulators in, or overwrites them on the first channel tile. When read,
  it gives `sat16(ReLU(psum >>> out_shift))`.

A PE pass is one output row for one channel tile. It takes
`entries + stall cycles + queue drain + 1` cycles.

## Chip dataflow

`ucnn_top` connects the following:

* `ucnn_global_buffer` (L2): two halves of 131072 activation words. A layer
  reads one half and writes its outputs to the other, so consecutive layers
  ping-pong. There is also a 65536-word weight/table store.
* `ucnn_scheduler`: the layer controller.
* Two `ucnn_multicast_bus` instances, one for inputs and one for weights and
  tables. They are registered, and each word carries a one-hot-or-more
  destination mask.
* 32 `ucnn_pe`.

The scheduler runs a layer as follows:

1. It checks the configuration. It fetches the layer's unique weights from
   DRAM and broadcasts them to every PE's weight buffer.
2. It fetches filter groups' tables into the L2 weight store, `K_c` filters
   at a time. `K_c` is as many as fit, and is recomputed per layer. Each
   weight/table word leaves DRAM once per layer.
3. It splits the work into jobs. A job is (4 output columns) x (one filter
   group) for all output rows. Up to 32 jobs run per round, in lock step.
4. For each channel tile, it sends each distinct filter group's tables once
   on the weight bus. The word is multicast to every PE of the round that
   holds that group.
5. For each output row, it sends the input window on the input bus. The
   window goes to every PE of the round with the same columns: all `S` rows
   for the first output row, then one new row per step. Positions outside
   the layer (right edge, channel padding) are sent as zeros. Then every
   PE runs its row pass.
6. After the last channel tile, it reads each PE's outputs and writes them
   into the other L2 half.

Layer configuration (`layer_cfg_t`): input width/height/channels `w, h, c`;
filters `k`; filter size `r, s` (at most 3 x 3); unique weights `u`;
output shift; the L2 half that holds the input; and the DRAM base address.
Inputs are laid out as `in[c][y][x]` at `(c*H + y)*W + x`. Outputs follow
the same pattern, with `Wo = W - R + 1` and `Ho = H - S + 1`. Padding on the
top and left must be put in the input by the host.

DRAM image of a layer, at `dram_base`:

* `u` unique weights in canonical order.
* For filter group `f` and channel tile `t`, a record at
  `dram_base + u + (f * NCT + t) * 513`. It holds a count `n` and then `n`
  table words.

The DRAM interface is a simple request/response port with one read
outstanding. A host port on the L2 loads inputs and reads results.

## Parameters

| name | default | meaning |
|---|---|---|
| `NUM_PE` / `P` | 32 | processing elements |
| `VW` / `V` | 4 | spatial lanes per PE (`V_W`) |
| `GF` / `G` | 2 | filters sharing one table |
| `NUM_U` / `U` | 17 | unique weights |
| `R_T, S_T, C_T` | 3, 3, 32 | L1 tile; the input buffer is 6 x 3 x 32 x 16 bit = 1152 bytes |
| `IIT_DEPTH` | 512 | table entries per tile |
| `MAX_GROUP` | 16 | largest group before it is cut into chunks |
| `H_MAX` | 64 | output rows one PE can hold |
| `L2_ACT_WORDS` | 131072 | words per activation half (256 KB) |
| `L2_WT_WORDS` | 65536 | weight/table store words |
| `ACT_W, WT_W, PSUM_W` | 16, 16, 40 | data widths |

`P`, `V_W`, `G` and `U` come from the UCNN `U = 17` design point. The L1
input size matches that point's 1152 bytes. The queue depth, group limit,
`H_MAX`, table depth, L2 sizes, widths and all encodings are this design's
own choices.

## What it runs and what it does not

It runs unit-stride convolutions with filters up to 3 x 3, at most 64
output rows, and inputs and outputs that fit one L2 half. Examples are
AlexNet conv3 to conv5 and the 3 x 3 layers of ResNet-50 stages 3 to 5.

It does not implement:

* filters larger than 3 x 3 or strides above 1 (LeNet, AlexNet conv1/conv2,
  ResNet conv1);
* spatial tiling of inputs that do not fit the L2, needed for the 56 x 56
  ResNet stage;
* pooling (described as a small max circuit in the PE) or fully connected
  layers;
* the alternative jump-style table encoding, which is meant for larger `U`;
* the other `U` design points (3, 64, 256). These need `V`, `G` and `U`
  changed, and only the defaults and small test sizes have been simulated.

Two details differ from the original description of the scheme. The
in-bank address uses `floor((r+v)/V_W)` for the column block. A ceiling
would need a third block for column 5, and it would not match the stated
fraction of unused addresses. Also, each lane has its own multiplier; no
multiplier is shared between lanes.

Control is simpler than a production design in one respect. All PEs of a
round wait for each other, and loads are serial on each bus. Loading is not
overlapped with compute.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* Unit testbenches check each block against an independent model.
  * `tb_ucnn_wit` decodes every code.
  * `tb_ucnn_input_buffer` does random vector reads after row rewrites.
  * `tb_ucnn_group_accum` compares against a per-filter running sum.
  * `tb_ucnn_mac_unit` checks throughput and overflow.
  * `tb_ucnn_psum_buffer` checks ReLU, shift and saturation.
  * The rest check data round-trips.
* `tb_ucnn_pe` runs a two-filter, four-lane hand example and four random
  layers (weight density 15 to 100 %). It compares every partial sum and
  activation with a direct convolution. It also requires stalls, skip
  entries, chunk flushes and zero-weight skips to occur.
* `tb_ucnn_top` uses 4 PEs and small L2 buffers. It runs two chained layers
  through DRAM, the scheduler and the buses: 40 channels (two tiles with
  padding) and 6 filters, several `K_c` chunks and rounds, then a second
  layer that reads the first one's output half. It checks every output word
  and requires each mechanism to have happened.
* `tb_ucnn_top_full` instantiates `ucnn_top` with all defaults (32 PEs, full
  L2). It runs an 18 x 5 x 40 input with 12 filters and checks every output.

`tb/ucnn_tb_pkg.sv` generates the layers. Weights are random signed powers
of two plus zero at a chosen density, and activations are random at a
chosen density. The same file builds the tables and computes the reference
outputs. `tb/ucnn_dram_model.sv` is a behavioural DRAM with a fixed
latency.

To simulate with Verilator from the project root, for example:

```
verilator --binary -Wno-fatal -Irtl -Itb -I. --top-module tb_ucnn_top \
  rtl/ucnn_pkg.sv tb/ucnn_tb_pkg.sv rtl/*.sv tb/ucnn_dram_model.sv tb/tb_ucnn_top.sv
./obj_dir/Vtb_ucnn_top
```

Unit testbenches need only `rtl/ucnn_pkg.sv`, the block's files and the
testbench itself.
