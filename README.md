# A deformable-convolution accelerator in SystemVerilog

In a deformable convolution, the network does not sample its input on a
fixed grid. It first computes a fractional sampling position (alpha, beta) for
every output position, or for every kernel tap. It then reads the input there
by bilinear interpolation (BLI) and convolves the resulting "deformed" features
as usual. An ordinary CNN accelerator cannot do this well, for three reasons:

* the four neighbours that one interpolation needs sit in different rows and
  columns of the feature map;
* interpolation is a small multiply-accumulate with weights that change for
  every index;
* and which input data a tile of the output needs is known only at run time.

This design starts from a plain output-stationary accelerator: a 16 x 32 array
of 8-bit PEs and separate input, output, weight, index and instruction buffers.
It adds four mechanisms so that the same hardware runs deformable layers:

1. **Clustered PE array.** Every four vertically adjacent PEs form a cluster.
   In BLI mode a cluster computes one interpolated value per cycle, so the
   128 clusters interpolate 128 channels of one sampling point at once.
2. **Parity-banked input buffer with an address converter.** The input map is
   split by the parity of its row and column coordinates into four banks. The
   four neighbours of any sampling point then lie in four different banks and
   are read in one cycle.
3. **Coefficient calculator.** It computes the four interpolation weights from
   the fraction parts of the index. It uses one multiplier plus adders.
4. **Tile dependency table (TDT) and runtime tile scheduler.** When a layer
   does not fit on chip, the TDT records which input tiles each output tile
   reads. The scheduler uses it to order the output tiles and the input-tile
   loads so that on-chip data is reused.

BLI and the following convolution are also **fused**. BLI writes its results to
the output buffer. The next convolution reads its features from there by
swapping the roles of the input and output buffers, so the deformed features
never leave the chip.

## Configuration

| Item | Default | Parameter |
|---|---|---|
| PE array | 16 rows x 32 columns, 8-bit signed fixed point | `ROWS`, `COLS` |
| Clusters | 4 PEs each, 128 clusters | `CL` (fixed at 4) |
| Input buffer | 128 KB in 4 banks of 256 words of 1024 bits | `IN_BUF_KB` |
| Output buffer | 256 KB, 2048 words of 1024 bits | `OUT_BUF_KB` |
| Weight buffer | 256 KB, 8192 words of 256 bits | `WGT_BUF_KB` |
| Index buffer | 32 KB, 8192 index pairs | `IDX_BUF_KB` |
| Instruction buffer | 64 KB, 16384 words of 32 bits | `INST_BUF_KB` |
| Tiles per map | up to 8 x 8 (64), set at run time | `dcn_pkg::GRID_MAX` |

The numbers for the array and the buffers are those of the published design,
which targets 800 MHz. No timing closure has been attempted here.

## Number formats

* **Features and weights** are signed 8-bit integers (`feat_t`).
* **Accumulators** are 32 bits wide. A convolution result is written back as an
  8-bit value: shifted right arithmetically by `cmd.shift`, then saturated to
  [-128, 127].
* **A sampling index** is unsigned Q10.6: 10 integer bits and 6 fraction bits.
  `alpha` is the column coordinate and `beta` the row coordinate. Feature maps
  can therefore be up to 1024 pixels on a side.
* **BLI coefficients** are signed 8-bit with 6 fraction bits, so 1.0 is 64.
  With `da` and `db` the 6-bit fraction parts of alpha and beta:

      gamma = floor(da*db / 64)
      theta = da - gamma
      mu    = db - gamma
      eta   = 64 - da - db + gamma

  These are (1-a)(1-b), (1-a)b, a(1-b) and ab, rescaled so that one product
  is enough and the four always sum to exactly 64. `coef_calc` forms the
  product in its first stage and the adds and subtracts in its second.
* **The interpolated value** is `floor((eta*f_lb + mu*f_lt + theta*f_rb +
  gamma*f_rt) / 64)`.

## The clustered array and how BLI maps onto it

`pe.sv` is a single PE with two datapaths:

* **Standard mode.** An output-stationary MAC. The feature moves right and the
  weight moves down, one PE per cycle. After a layer, `drain` shifts the
  accumulators down the column.
* **BLI mode.** The PE holds one coefficient, loaded with `coef_load`. It adds
  `coef * feature` to a partial sum that passes straight through from the PE
  above, without a register.

`pe_cluster.sv` chains four PEs. Its output select (0 = normal column output,
1 = BLI output) chooses between the standard drain path and the BLI result.
In BLI mode:

* the partial sum leaving the bottom PE is shifted right by 6;
* it is registered as the cluster's B-O output.

The four PEs of every cluster hold eta, mu, theta and gamma in that order.
They multiply the lb, lt, rb and rt neighbours, where l/r is floor/ceil of
alpha and b/t is floor/ceil of beta.

`pe_array.sv` places the clusters as a 4 x 32 grid: cluster `q*32 + c` covers
rows 4q..4q+3 of column c. In standard mode it is a normal 16 x 32 systolic
array. Skew registers inside the array delay row r by r cycles and column c
by c cycles, so the caller presents one unskewed 16-feature slice and one
32-weight word per step. In BLI mode:

* all 128 clusters get the same four coefficients, because they all work on
  the same sampling point;
* each cluster gets the four neighbours of its own channel;
* the 128 B-O outputs form one 1024-bit output word, one cycle after the
  features.

## The parity-banked input buffer and address conversion

Two rules place a pixel (x, y) of the input map, with channel group g:

* **Bank**, from the parities of row y and column x:

  | row y | column x | bank |
  |---|---|---|
  | odd | odd | 0 |
  | odd | even | 1 |
  | even | even | 2 |
  | even | odd | 3 |

* **Word address within the bank**: `(floor(y/2) * j + floor(x/2)) * i - T0 + g`, where:
  * `j` is the number of pixel pairs per row (half the map width);
  * `i` is the number of 128-channel words per pixel;
  * `T0` is the address of the first word of the tile that is on chip.

The four neighbours (floor/ceil in each direction) always differ in both
parities, so they fall in four different banks. `addr_conv.sv` computes all
four addresses in two pipeline stages, one index per cycle, and also reports
them per bank. The top uses the per-bank form directly as the four read
addresses of `input_buffer.sv`.

The ceiling is computed as floor + 1, even for an integer coordinate. The
neighbour it names then gets a zero coefficient. This keeps the bank pattern
fixed, so it never matters whether that pixel exists.

## Tile dependency table

The map is cut into `cfg_grid x cfg_grid` tiles, with the tile boundaries given
as configuration (`cfg_bound_a` for alpha, `cfg_bound_b` for beta).
`tdt.sv` processes one index per cycle, tagged with the output tile it belongs
to, in two stages:

1. The integer parts of alpha and beta are compared with every boundary. The
   result is a thermometer code, so the tile row (column) is its count of ones.
2. The input tile `row*grid + col` is decoded to one-hot and ORed into the
   64-bit entry of the output tile.

After a layer's indices have passed, `dep[t]` lists the input tiles that output
tile `t` needs.

Note the orientation. The tile *row* comes from `alpha` compared with the
`cfg_bound_a` boundaries, and the *column* from `beta`. This matches the
published worked example of the table. The address formula above uses beta as
the row coordinate. The two blocks each follow their own description; a user
who wants one convention must order the boundaries to match.

## Runtime tile scheduling

`tile_scheduler.sv` turns the table into two streams: the order in which to
compute output tiles, and the order in which to load input tiles.

**Output order.** The first output tile is the one that depends on the most
input tiles. Each next one is the unexecuted tile whose dependency vector
shares the most bits with the current tile's vector. One entry is examined
per cycle:

1. AND the entry with the current vector;
2. count the ones;
3. keep a pipelined running maximum.

Ties go to the lower tile ID. A chosen tile leaves the unexecuted set at once.

**Input order.** Take `OC` as the set of on-chip tiles and `B[x]` as the
dependency vector of tile x. For a newly chosen tile `next` after `curr`, the
needed tiles are split into three vectors:

    loaded   = OC & B[next]                        already on chip
    lastLoad = B[curr] & B[next] & ~loaded         also read by the previous tile
    seqLoad  = B[next] & ~loaded & ~lastLoad       the rest

Each vector is decoded into tile IDs, lowest first, and pushed into its own
queue. The queues are issued in the order loaded, then seqLoad, then lastLoad.
The tiles shared with the previous tile thus come last and are still
on chip when the following tile starts. Each issued input ID carries its
part (0, 1 or 2) and a hit flag. The flag says the tile is already on chip, so
no load is needed.

**Replacement.** Tiles on chip are replaced first-in first-out once
`cfg_onchip` of them are held. An issue that needs a load then also reports
`in_evict` and the victim's ID.

**Pre-scheduling.** The search for the next output tile runs while the input
queues of the current one drain. The split into three vectors waits until the
queues are empty, so that it sees the final `OC`.

## Putting it together: `dcn_accel`

The top takes commands already decoded into `cmd_t`, one at a time, with a
`cmd_valid`/`cmd_ready` handshake:

| `op` | What happens | Cycles |
|---|---|---|
| `OP_CONV` | `len` steps. Step k reads a 16-feature slice (`a_base + k`) and a 32-weight word (`w_base + k`) and feeds the array. The 16 x 32 results are requantised and packed 4 rows per 1024-bit word at `o_base`. With `swap = 0` features come from the input buffer and results go to the output buffer. With `swap = 1` it is the other way round: this is the fused path after BLI. | len + 2*16 + 32 + 2 |
| `OP_BLI` | For each of `len` indices from the index buffer, and for each of `cfg_i` channel groups: address conversion, four bank reads, interpolation on the array. Output word `o_base + m*cfg_i + g`. The coefficients of each index are written to the weight buffer at `w_base + m` and read back from there into the clusters. | one word per cycle plus 7 cycles |
| `OP_TDT` | Clears the table and feeds it `len` indices. Index n belongs to output tile `n / per_tile`. | about len + 4 |
| `OP_SCHED` | Starts the scheduler, which then runs in the background. Its results leave on the `sched_*` ports. | 1 |

A feature slice s is bytes `16*(s%8)` onward of buffer word `s/8`. Input-buffer
word w is bank `w%4`, address `w/4`. Other host ports write and read all the
buffers directly; use them only while `cmd_ready` is high. Reads return one
cycle after the address.

## Departures from the published design, and open points

* **No instruction set.** The published design has an instruction buffer and
  decoder but gives no instruction format. Here the instruction buffer exists
  only as a memory with host ports. The top accepts decoded commands, and the
  command set above is this design's own.
* **Index generation.** In the published flow the first convolution writes
  the sampling indices into the index buffer. How its outputs become
  absolute Q10.6 positions (adding the pixel grid, scaling, clamping) is not
  described. Here the host writes the index buffer.
* **Off-chip memory and DMA are not modelled.** Tile loads are reported by the
  scheduler but not performed; the host writes the buffers.
* **The published scheduling example does not follow from its printed
  vectors.** The scheduler follows the published algorithm, not the example's
  queue contents.
* **The published algorithm clears a chosen tile from the unexecuted set one
  step late,** which would let a tile pick itself. Here it is removed at once.
* **The definition of the last-load vector differs between prose and
  algorithm.** The prose describes it as the tiles the *next* tile reuses; the
  algorithm uses `B[curr] & B[next]`. The algorithm is followed.
* **The row/column conventions of the TDT and the address formula differ** (see
  above).
* **Own choices throughout:**
  * the index, coefficient and accumulator widths;
  * floor rounding of BLI results;
  * requantisation by shift and saturate;
  * every pipeline depth and handshake;
  * the one-entry-per-cycle scheduler scan and its tie rule.

## Files

| File | Content |
|---|---|
| `rtl/dcn_pkg.sv` | widths, number types, `cmd_t`, helpers; compile first |
| `rtl/pe.sv`, `rtl/pe_cluster.sv`, `rtl/pe_array.sv` | the clustered PE array |
| `rtl/addr_conv.sv`, `rtl/coef_calc.sv` | BLI address and coefficient pipelines |
| `rtl/sram_1r1w.sv`, `rtl/input_buffer.sv` | buffers (output, weight, index and instruction buffers are `sram_1r1w`) |
| `rtl/tdt.sv`, `rtl/tile_scheduler.sv` | tile dependency table and runtime scheduler |
| `rtl/dcn_accel.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |

Every testbench prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog. The testbenches check against values they compute independently:

* `tb_coef_calc` is exhaustive over all 4096 fraction pairs;
* `tb_tile_scheduler` compares both output streams with a behavioural model of
  the algorithm, under random back-pressure;
* `tb_dcn_accel` runs the top at its default size through:
  * a convolution into the output buffer;
  * a BLI pass;
  * a fused convolution reading the BLI results back through the swapped buffers;
  * TDT construction;
  * a full scheduling run.

  It counts every mechanism and fails if any of them never happened.
* `tb_workload_vgg19` runs one deformable layer of the VGG19-3 benchmarks at
  full size. The layer is 14 x 14 pixels with 512 channels, so the whole map
  fits in the input buffer. The test runs:
  * DCN-I interpolation for all 196 pixels;
  * DCN-II interpolation for 512 of the 1764 kernel-tap indices, which fills
    the whole output buffer;
  * the tile table and schedule for all 1764 indices on 7 x 7 tiles.

## Simulating

With Verilator 5, for example the full-size top-level test:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_dcn_accel \
        rtl/dcn_pkg.sv $(ls rtl/*.sv | grep -v dcn_pkg) tb/tb_dcn_accel.sv
    ./obj_dir/Vtb_dcn_accel

The package must come first on the command line. Replace the top module and
testbench file to run any other test. All testbenches finish in well under a
minute; the full-size top takes about 15 s to build and run.

Lint reports a few unused bits, which are intentional:

* the fraction bits of the index in the address converter;
* the low half of the coefficient product;
* unused fields of `cmd_t`.

It also reports a sync/async note on `rst_n`. This note comes from the
scheduler's handshake assertions, which are disabled during reset.
