# RED: energy-aware scheduling for an eDRAM processing-in-memory macro

Processing-in-memory (PIM) computes a matrix product inside the memory
array. The weights stay in the cells. The inputs are broadcast to the sense
amplifiers one bit plane at a time, and an adder tree beside each bank adds
up what the amplifiers read. With gain-cell (2T) eDRAM as the array, most of
the energy goes into charging and discharging the read bitlines (RBL).

That bitline swing can be tuned. In a read, a pull-down driver pulls the
read wordline to a voltage VPD instead of ground:

* **Higher VPD:** the swing is smaller, so each access costs less energy.
  The 32 x 512 array falls by about 71 % from 0 mV to 500 mV. But the
  sensing margin shrinks, so data survives for less time. Retention drops
  from about 100 us to 9 us, which means more refresh.
* **Lower VPD:** the swing is larger. Accesses cost more, but refresh is
  rare.

Which setting wins depends on how long each piece of data must stay in
memory. That lifetime in turn depends on how the GEMM is tiled.

This design puts both decisions in hardware. For each GEMM
`O[M][N] = I[M][K] x W[K][N]` (INT8 inputs and weights, 32-bit outputs), it
does three things:

1. It searches every tiling scheme, meaning loop order and tile shape.
2. For each scheme, it works out the lifetime of the input, weight and
   output tiles. From those it evaluates the total energy at every
   combination of macro VPD and buffer VPD, and keeps the cheapest.
3. It runs the GEMM on the PIM macro at the chosen setting. Only data that
   is still live gets refreshed; tiles that are finished with are never
   refreshed again.

The reference voltage of the sense amplifiers (VREF) always moves with VPD.
It sits at the midpoint of the swing of the chosen level.

## Block structure

```
             +---------------- red_top -------------------------------------+
  start,M,K,N|  retention_aware_scheduler         spec_table (per VPD level: |
  weight map |   lifetime_estimator -> energy_estimator -> energy_optimizer  |
  ---------->|   (FSM over all tilings)    ^ access/refresh energy,retention |
             |            | scheme + VPD/VREF levels                         |
             |            v                                                  |
             |  pim_macro_controller                                         |
             |   voltage_switch   address_controller   2 x refresh_controller|
             |        |                 |                                    |
             |        v                 v                                    |
             |  pim_macro: 4 x pim_bank: 2 x edram_subarray + processing_unit|
             |  unified_buffer (60 KB eDRAM, inputs, weights, partial sums)  |
  host port  |<----> buffer, while idle                                      |
             +---------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `red_pkg` | Shared types: tile shape, loop order, weight map, scheduler result, spec-table entry. Also the default spec table. |
| `red_top` | Wires the blocks together. Takes a GEMM request, schedules it, runs it. |
| `retention_aware_scheduler` | Enumerates tiling schemes and feeds each one through the estimators. |
| `lifetime_estimator` | Computes tile time T, the lifetimes LT_I/LT_W/LT_O, and the access counts P_N and B_N. |
| `energy_estimator` | Evaluates the energy formula for all 5 x 5 (macro VPD, buffer VPD) pairs of one scheme. |
| `seq_divider` | 48-bit restoring divider used by the energy estimator. |
| `energy_optimizer` | Comparator plus best-so-far register. |
| `spec_table` | Programmable table of energy and retention per VPD level. |
| `pim_macro_controller` | Runs the tiled GEMM, drives VPD/VREF, and refreshes live rows only. |
| `voltage_switch` | Turns level selects into one-hot enables for the VPD and VREF switches of macro and buffer. |
| `address_controller` | Walks the tile loop nest and produces buffer addresses. |
| `refresh_controller` | Tracks which rows are live and runs burst refresh that skips dead rows. |
| `pim_macro`, `pim_bank` | Banks and subarrays sharing one input broadcast. |
| `processing_unit` | Adder tree and shift-accumulate. |
| `edram_subarray` | Behavioural model of a 32 x 512 reconfigurable 2T eDRAM array. |
| `unified_buffer` | Behavioural model of the 60 KB eDRAM buffer. |

Default sizes:

* Four banks. Each bank has two 32 x 512 subarrays, so 4 KB per bank and a
  16 KB macro.
* A 60 KB buffer, organised as 15360 32-bit words in 960 rows of 16 words.
* Five VPD levels: 0, 200, 300, 400 and 500 mV, encoded as 0 to 4.

## The sense amplifier as a 1-bit multiplier

A sense amplifier whose input bit is 0 is power gated. It reads 0 whatever
the cell holds. Its output is therefore `input bit AND stored bit`, which is
exactly a 1-bit product. So the array itself does the multiplication, and
zero bits in the activations save sensing power.

Inputs are always fed bit-serially, one bit plane per read, LSB first.
Weights can be laid out in one of two ways (`wmap`):

* **Bit-serial weights.** Weight `e` of output column `j` sits in array
  column `e`, with its bit `b` in row `8j + b`. An input bit plane gives
  each column its own input bit. One dot product takes 8 x 8 = 64 reads.
  The processing unit takes the popcount of the amplifier outputs and
  shifts it left by `wbit + ibit`. It subtracts the term when exactly one
  of the two planes is an MSB, because the MSB of a two's-complement number
  has negative weight.
* **Bit-parallel weights.** Row `j` holds all weights of output column `j`,
  with weight `e` in columns `8e .. 8e+7`. All eight columns of a weight
  share one input bit. One dot product takes 8 reads. The processing unit
  adds the 8-bit groups as signed numbers and shifts the sum by `ibit`. It
  negates the term for the input MSB plane.

All banks and subarrays read the same row in the same cycle. Column `c` of
the macro is bank `c / 1024`, subarray `(c / 512) % 2`. The bank sums are
added, and the result is valid two cycles after the last read.

This gives the maximum tile sizes for one macro load:

| Weight map | k (reduction) | n (output columns) |
|---|---|---|
| Bit-serial | up to 4096 | up to 4 |
| Bit-parallel | up to 512 | up to 32 |

## Scheduling: lifetimes and the energy model

A tiling scheme has a loop order and a tile shape `m x k x n`:

* The loop order is either `LJI` (`for l over N/n, for j over K/k, for i
  over M/m`) or `LIJ` (`for l, for i, for j`).
* Tile sides are powers of two. `m` runs up to the next power of two of M.
  `k` runs from 4 up to the smaller of that for K and the macro limit
  above; `n` likewise, with its own macro limit.

For a scheme, `lifetime_estimator` computes the values below, in clock
cycles:

| Quantity | Meaning |
|---|---|
| `T` | Compute time of one tile: `m*n*8` (bit-parallel) or `m*n*64` (bit-serial). |
| `LT_I`, `LT_W`, `LT_O` | How long an input, weight and output tile must stay in memory. |
| `P_N` | Macro reads: number of tiles x `T`. |
| `B_N` | Buffer word accesses: input loads, partial-sum reads and writes, and weight-tile loads. |

The lifetimes depend on the loop order:

| Loop order | `LT_I` | `LT_W` | `LT_O` |
|---|---|---|---|
| LJI | `(M/m)(K/k)(N/n)T` | `(M/m)T` | `(M/m)T` |
| LIJ | `(M/m)(K/k)(N/n)T` | `(M/m)(N/n)T` | `T` |

Counts of tiles round up. For LIJ the input lifetime is taken as the whole
run, like LJI; the source does not give it.

`energy_estimator` then evaluates, for every macro level `vp` and buffer
level `vb`:

```
E = (P_acc[vp] + E_PU) * P_N + P_ref[vp] * floor(LT_W / P_ret[vp])
  +  B_acc[vb] * B_N         + B_ref[vb] * (floor(LT_I / B_ret[vb]) + floor(LT_O / B_ret[vb]))
```

The floor terms count how often a tile has to be refreshed during its
lifetime. A lifetime shorter than the retention time costs nothing, so
refresh is skipped for that data. The three divisions per level are done
by sequential dividers, all levels in parallel. A scheme costs about 50
cycles of division plus 25 cycles to stream its candidates out.
`energy_optimizer` keeps the strictly smallest energy, so on a tie the
scheme found first wins.

The spec table holds, per level:

* `P_acc` and `B_acc`: access energy of macro and buffer.
* `P_ref` and `B_ref`: refresh energy per tile refresh.
* `P_ret` and `B_ret`: retention time in cycles.
* `E_PU`: one processing-unit energy value, shared by all levels.

It comes out of reset with illustrative numbers. Access energy goes from
920 to 265 (a 71 % drop from level 0 to level 4). Refresh is 64 x access.
Retention is 20000 / 8000 / 4000 / 2400 / 1800 cycles at 200 MHz. Only the
two end retention points (100 us and 9 us) are measured values; the rest
must be replaced with characterised numbers of the real macro. Program
them through `cfg_we / cfg_lvl / cfg_field / cfg_wdata`:

| `cfg_field` | Entry |
|---|---|
| 0 | `P_acc` |
| 1 | `P_ref` |
| 2 | `P_ret` |
| 3 | `B_acc` |
| 4 | `B_ref` |
| 5 | `B_ret` |
| 6 | `E_PU` |

## Execution and refresh skipping

`pim_macro_controller` handles one tile at a time, in the chosen loop order.
`address_controller` supplies the tile origin, the clipped size of edge
tiles, and whether the weight tile changed. For each tile:

1. **New weight tile.** Free all macro rows: the old weights are dead and
   are never refreshed again. Then copy the `k x n` weight tile from the
   buffer into the macro, one 32-bit word (four weights) at a time, using
   masked row writes.
2. **Each input row of the tile.** Clear the input register and load the
   row's `k` inputs. Then, for each output column, run the 8 or 64 reads of
   the dot product. The input bit plane is broadcast on every read.
3. **Partial sum.** Add the result to the partial sum in the buffer, as a
   read-modify-write, then write it back. The read is skipped on the first
   K tile.

Buffer layout, chosen by this design:

* `I` is stored row-major at `ibase`.
* `W` is stored transposed, as `N x K` bytes, at `wbase`.
* `O` is stored as `M x N` 32-bit words at `obase`.
* K, and the tile side k, must be multiples of 4. The three regions must
  start on a 16-word row boundary.

Assertions check all of this when a run starts.

Refresh uses one `refresh_controller` for the 32 macro rows and one for the
960 buffer rows:

* **Live and dead rows.** A row becomes live when it is written. It stays
  live until it is freed. Macro rows are freed on each weight-tile change
  and at the end. Buffer rows inside the input and weight regions are freed
  at the end. The host can free any buffer rows.
* **Bursts.** Every `retention - rows - 8` cycles, a burst scans all rows,
  one per cycle. It refreshes live rows and skips dead rows without using
  the port. A refresh cycle takes priority over any access, and the access
  waits; `n_stall` counts these waits.
* **Counters.** `n_macro_ref`, `n_buf_ref`, `n_macro_skip` and
  `n_buf_skip` count refreshes and skipped rows. They show how much
  refresh skipping saved.

**Level changes.** When a run starts, the controller switches the
VPD/VREF levels and forces one refresh burst in both memories before it
makes any access. Data written at the old level would otherwise meet the
possibly much shorter retention of the new level with its old age.

**Failed reads.** The memory models have a fixed physical retention per
level (`RET_CYCLES`). A read of a row older than that, or with VREF not
paired with VPD, returns 0 and sets the sticky `err` output. The read only
counts as failed when at least one amplifier is enabled. If the spec table
claims a longer retention than the array really has, `err` shows it.

## Using `red_top`

1. Write `I` and `W^T` into the buffer through the host port:
   * Set `host_req` and `host_wr` with `host_addr` and `host_wdata`.
   * An access is taken in a cycle where `host_ready` is high.
   * A read returns `host_rdata` with `host_rvalid` one cycle later.
   * The port works only while the core is idle (`sched_busy` and
     `run_busy` low).
2. Optionally program the spec table.
3. Pulse `start` for one cycle with `dim_m`, `dim_k`, `dim_n`, `wmap`,
   `ibase`, `wbase` and `obase`.
4. `sched_busy` is high while schemes are evaluated; `n_eval` counts them.
   `run_busy` is high while the GEMM runs. `sched_result` shows the chosen
   loop order, tile shape, levels and energy.
5. `done` pulses when `O` is complete in the buffer.
6. Read `O` back. Then free the rows with `host_free_en` / `host_free_lo` /
   `host_free_hi` so they stop being refreshed.

The one-hot outputs `macro_vpd_sw`, `macro_vref_sw`, `buf_vpd_sw` and
`buf_vref_sw` are meant to drive the analog level switches.

Example run times at the default size, scheduling included:

| GEMM | Weight map | Cycles |
|---|---|---|
| 4 x 768 x 6 | Bit-parallel | about 67 k |
| 2 x 1024 x 3 | Bit-serial | about 45 k |

## Simulating

Every testbench checks itself. Each one ends with a
`TB_RESULT checks=N failures=F` line and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Itb -y rtl rtl/red_pkg.sv tb/tb_red_top.sv \
          --top-module tb_red_top -Mdir obj_red_top && obj_red_top/Vtb_red_top
```

Replace `tb_red_top` with any of the testbenches:

| Testbench | What it covers |
|---|---|
| `tb_red_top_full` | The top at default size: two GEMMs, one per weight map. |
| `tb_red_top` | Reduced size (16 x 32 subarrays, two banks). Many GEMM shapes in both maps and both loop orders. Checks every output. Counts each mechanism and fails if one never happened: level switches, refresh, skipped rows, stalls, weight reloads, gated amplifiers. |
| `tb_pim_macro_controller` | Controller with fixed schemes, including refresh at a short retention. |
| Unit testbenches | One per module, comparing against models written inside the testbench. |

`tb/red_top_harness.svh` holds the host tasks shared by the two top-level
benches, hence the `-Itb`. `-y rtl` lets Verilator find each module in
`rtl/<name>.sv`; only the package has to be named first.

## How this departs from the source description, and what is not here

* **Analog parts are not built.** The pull-down driver, the sense
  amplifiers and the voltage generators are analog. They appear only as
  the behavioural models `edram_subarray` and `unified_buffer`, and as the
  one-hot switch enables at the top. Both memory models are flop arrays,
  not memory macros.
* **Five VPD levels.** The source names five VPD settings in its power
  breakdown (0 to 500 mV), but elsewhere says four (200 to 500 mV). Five
  are built.
* **Retention between the end points is interpolated.** Only 100 us and
  9 us are given. All energy numbers are placeholders, to be replaced with
  characterised values.
* **The LIJ weight lifetime uses the printed formula.** It is
  `(M/m)(N/n)T`. The timeline drawn beside it would rather suggest
  `(M/m)(K/k)T`. `T`, `P_N` and `B_N` follow from this design's own
  mappings and buffer traffic, since the source does not spell them out.
* **Scheduling runs on chip, once per GEMM request.** The source's numbers
  come from a software model of the same steps. The tile shapes searched
  (powers of two within the macro limits) are this design's choice.
* **A GEMM must fit the 60 KB buffer in one piece.** Inputs, transposed
  weights and 32-bit outputs must all be in the buffer at once. None of
  the evaluated workloads fits whole:
  * The Transformer projections (1024 tokens) need megabytes.
  * The small matrix shapes studied need 80 to 86 KB.

  They run as a sequence of smaller GEMMs split along M or N. Splitting
  along K is not supported, because partial sums are not carried between
  runs.
* **Partial sums get no special refresh treatment.** An output row is
  live from its first write until the host frees it. Every burst in that
  time refreshes it, even if it is about to be rewritten. Skipping
  short-lived partial sums shows up only in the energy model, where
  `floor(LT_O / B_ret)` is 0.
* **Timing is functional, not cycle-exact to silicon.** Every memory access
  takes one cycle. There is no model of latency inside the macro, and no
  off-chip interface.
