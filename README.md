# Streaming STAC-A2 on an FPGA: Heston QE paths with a double-buffered path reduction

This is SystemVerilog for an accelerator that runs the core of the STAC-A2
risk benchmark. That core has four steps:

1. Simulate many Monte Carlo paths of the Heston stochastic-volatility model
   for several assets, stepping each path with Andersen's
   quadratic-exponential (QE) scheme.
2. Exponentiate the log prices.
3. For every path and every timestep, reduce across the assets to the
   largest price. This is the input that a Longstaff–Schwartz
   early-exercise pricer needs.
4. Stream the reduced values back out.

Everything hinges on a loop interchange. A Heston path is a recurrence
over time: timestep t+1 of a path needs timestep t's result. The QE step is
a long chain of multiplies, square roots, a logarithm and an exponential,
so a hardware pipeline running timesteps back to back would stall for
hundreds of cycles per step. The accelerator therefore makes the path the
innermost loop. Consecutive elements belong to different, independent
paths, and the pipeline accepts one element per cycle with no stalls.

The price of that interchange is paid in two places:

* **Orientation.** The reduction across assets now sees each asset's whole
  timestep × path tile before the next asset arrives. So it has to hold a
  tile on chip, and the tile's size limits the problem. The fix has two
  parts:
  * split the paths into *path groups* (batches), so a tile never exceeds
    `MAX_STEPS × MAX_GROUP`;
  * **double-buffer** the tile, so one group is reduced while the previous
    one is streamed out.
* **Data order.** The random draws must reach the kernel already in
  group > asset > timestep > path order, and the results leave in tile
  order. The reordering happens on the host. To hide its cost, the host
  cuts the run into *chunks* and overlaps three things:
  * reordering and DMA-ing one chunk,
  * the accelerator computing the previous chunk,
  * reordering the results of the one before that.

  The card can only DMA into its HBM, so small *streamer* blocks turn
  chunks in HBM into a continuous stream for the kernel and back again.
  They use a chained start/done protocol, so that the next chunk is
  queued while the current one runs.

A *compute unit* is one kernel plus its two streamers. The top level
replicates it six times, which is what fitted the Alveo U280 at 300 MHz.
The same RTL with `NUM_CU = 4` is the Stratix-10 configuration.

## Block map

```
            HBM read port                                     HBM write port
                 |                                                  ^
          input_streamer  (512-bit words -> elements, ap_ctrl_chain)   |
                 |  elem_t {zx, zv}                          result_streamer
                 v                                         (values -> 512-bit words)
  +------------------------------ stac_a2_kernel -----------------------------+
  | path_group_sequencer -> variance_path_qe -> log_price_path_qe            |
  |   (tags each element     (QE variance,       (QE log price,              |
  |    with its loop          per-path state)     per-path state)            |
  |    position)                     \               /                       |
  |                           heston_param_table (per-asset constants)       |
  |                                                                          |
  |   -> asset_path_exponential -> ls_path_reduction ------------------------+--> fx_t
  |        (exp)                   (max over assets, ping-pong tile)         |
  +--------------------------------------------------------------------------+
                         compute_unit  x NUM_CU  =  stac_a2_top
```

| File | Role |
|------|------|
| `rtl/stac_a2_pkg.sv` | Number format, record types (`heston_cfg_t`, `tag_t`, `elem_t`) and the fixed-point operators, including `qe_variance` and `qe_log_price` |
| `rtl/heston_param_table.sv` | Per-asset Heston constants. Loaded by the host; two combinational read ports |
| `rtl/path_group_sequencer.sv` | Loop nest. Splits paths into groups and tags every element with group, asset, timestep, path and first/last flags |
| `rtl/variance_path_qe.sv` | QE variance step, with a per-path variance store for the current group |
| `rtl/log_price_path_qe.sv` | QE log-price step, with a per-path log-price store |
| `rtl/asset_path_exponential.sv` | `exp` of the log price |
| `rtl/ls_path_reduction.sv` | Maximum over assets into a double-buffered timestep × path tile; serves the finished tile |
| `rtl/stac_a2_kernel.sv` | The chain above, with run start/done |
| `rtl/input_streamer.sv` | HBM chunk → element stream |
| `rtl/result_streamer.sv` | Result stream → HBM chunk |
| `rtl/compute_unit.sv` | Kernel + input streamer + result streamer |
| `rtl/stac_a2_top.sv` | `NUM_CU` compute units |

## Numbers

Every real value is a 64-bit signed fixed-point number with 40 fraction
bits (Q24.40). The range is about ±8.4·10⁶ and the resolution
9.1·10⁻¹³. The accelerator the design follows computes in IEEE
double or single precision. Fixed point keeps every operator plain integer
logic, and it keeps the data layout unchanged:

* an element is two 64-bit data points;
* a 512-bit memory word holds four elements, or eight results.

The operators live in `stac_a2_pkg` as combinational functions with fixed
loop bounds:

| Operator | How it works |
|----------|--------------|
| multiply | Full 128-bit product, shifted back |
| divide | 128-bit quotient, saturating |
| square root | Digit by digit |
| `exp` | Reduced to 2ⁿ·eʳ with r ∈ [0, ln 2), then a 14-term Horner series |
| `ln` | Normalised to 2ⁿ·m, then an atanh series in (m−1)/(m+1) |
| normal CDF Φ | Abramowitz & Stegun 26.2.17 (absolute error < 7.5·10⁻⁸) |

Fixed point loses accuracy where the QE formulas divide two small numbers.
At small variance, the conditional variance s² and the squared mean m² are
both of order 10⁻⁶ or less. Rounding each of them to Q40 first would leave
only a few significant bits in ψ = s²/m² and in 2/ψ. So `qe_variance`:

* forms s² and m² as exact 128-bit (Q80) products;
* divides them with a 192-bit ratio (`fx_ratio_q80`);
* computes a·(b+Zv)² with a = m/(1+b²) by multiplying before dividing,
  so the small factor a is never rounded on its own.

With this, a 1260-step path agrees with a double-precision model to about
10⁻⁸ relative. Without it, the error grew past 10⁻⁶.

### Host-side constants

The host precomputes the per-asset constants (`heston_cfg_t`) from
(κ, θ, ξ, ρ, r, Δt, S₀, V₀). The hardware only multiplies and adds them.

| Constant | Value |
|----------|-------|
| `e_kdt` | e^(−κΔt) |
| `c1` | ξ²·e_kdt·(1 − e_kdt)/κ, so that s² = v·c1 + c2 |
| `c2` | θξ²(1 − e_kdt)²/(2κ) |
| `k0`…`k4` | Andersen's log-price constants with γ₁ = γ₂ = ½; `k0` also carries the drift rΔt |
| `v0`, `lns0` | Initial variance and log price |

`tb/tb_ref_pkg.sv` (`make_cfg`) contains the exact formulas.

## The QE step, element by element

Each element carries two standard normal draws, Zv and Zx. For one
element, `variance_path_qe` does the following:

1. Read the path's current variance v from its state store. At timestep 0
   it uses the asset's V₀ instead.
2. Form the conditional mean m = θ + (v − θ)e^(−κΔt), the variance s², and
   ψ = s²/m².
3. If ψ ≤ 1.5, take the **quadratic branch**:
   * b² = 2/ψ − 1 + √(2/ψ)·√(2/ψ − 1)
   * v′ = m(b + Zv)²/(1 + b²)
4. Otherwise take the **exponential branch**:
   * p = (ψ − 1)/(ψ + 1) and U = Φ(Zv)
   * v′ = 0 if U ≤ p
   * otherwise v′ = m·ln((1 − p)/(1 − U))/(1 − p)

   Using Φ of the variance draw as the uniform keeps two draws per
   element, as the benchmark's data layout has.
5. Write v′ back to the state store.

`log_price_path_qe` then computes
ln X′ = ln X + k0 + k1·v + k2·v′ + √(k3·v + k4·v′)·Zx.
Its own state store is seeded with ln S₀ at timestep 0.

`asset_path_exponential` turns ln X′ into the price X′.

Both state stores hold `MAX_GROUP` entries, indexed by the path number
within the group:

* Within a group, the order is asset > timestep > path. So an entry is read
  once per (asset, timestep) and written back in the same cycle.
* The next access to the same entry comes a whole path row later. That
  is why the stages need no forwarding.
* A new asset, or a new group, starts again at timestep 0 and so re-seeds
  the store.

## The path reduction and its ping-pong buffer

`ls_path_reduction` is the hardest part to follow. It has a fill side and a
serve side.

**Fill side.** It receives prices in group > asset > timestep > path order
and keeps, for each (timestep, path) of the current group, the largest
price seen so far. The tile is stored at `step*MAX_GROUP + path`. For each
price:

* the first asset (`tag.first_asset`) writes the price;
* every later asset does a read-compare-write of the same entry.

Entries are visited in the same order for every asset. Two consecutive
elements never touch the same entry, so this runs at one element per
cycle.

**Serve side.** It streams a finished tile out timestep-major and
path-minor, one value per cycle, honouring `out_ready`.

**The two banks.** The tile memory exists twice:

* The last element of a group (`tag.group_end`) marks the fill bank full.
  It also records the group's path count, step count and whether it ends
  the run. The fill side then moves to the other bank.
* The serve side always drains the oldest full bank. Emptying a bank
  clears its full bit and moves the serve side on.
* If the fill side finishes a group while the other bank is still being
  served, it stalls: `in_ready` drops and `fill_stall` is raised.

So from the second group on, reduction and output overlap. Whether the
fill side ever stalls depends on the tile shape and on back pressure
downstream:

* Serving a group takes T·G cycles.
* Filling the next one takes A·T·G cycles.
* So with more than one asset and no back pressure, serving always wins.

The stall shows up in two cases: with a single asset, or when the result
streamer is held up by an unacknowledged `ap_done` or a slow memory.

**Sizing.** `MAX_STEPS = 1260`, the longest run evaluated (five years of
trading days). `MAX_GROUP = 128` is this design's choice; the group size
itself is a run-time argument up to that limit.

* Two banks: 2 × 1260 × 128 × 8 B = 2.58 MB per unit, 15.5 MB for six
  units.
* Available: the U280's 4.5 MB of BRAM plus 30 MB of UltraRAM.
* Without groups, even the smallest problem (25 000 paths × 126 steps)
  would need 25 MB for a single tile.

The two banks are the two halves of one array, with bank b's entry i at
`b*DEPTH + i`. A synthesis tool therefore infers a single RAM: one unit
comes out as about 4 300 word-level cells, 2 300 flip-flops and 20.7 Mbit
of memory, almost all of it this tile.

The memory is modelled with an asynchronous read, so the read-modify-write
fits in one cycle. A real build maps it to URAM with a registered read and
a short forwarding path. This changes the latency, not the rate.

## Loop nest and path groups

`path_group_sequencer` takes the run arguments on `ap_start`:

| Argument | Width |
|----------|-------|
| `assets` | 16 bits |
| `timesteps` | 16 bits |
| `paths` | 32 bits |
| `paths_per_group` | 16 bits |

It works out the number of groups, ⌈paths / paths_per_group⌉, and the size
of the last group. Every element is then tagged with a `tag_t`:

* its group, asset, timestep and path-in-group;
* the size of its group;
* the flags `first_asset`, `first_step`, `group_end` and `run_end`.

Every later stage is driven only by these tags, so none of them needs
counters of its own.

## Streamers and chunks

The kernel is started once per run. Its input is one long stream that
crosses chunk boundaries without a gap. The two streamers, by contrast, are
started once per chunk.

**Input streamer.** One command is (word base address, number of
elements). It reads the chunk as 512-bit words and issues the elements one
per cycle. Element k of a word sits in bits `[128k +: 128]` as `{zx, zv}`.
Reads are credit-limited by a `FIFO_DEPTH`-word buffer, so the memory port
never needs back pressure on responses.

**Result streamer.** It packs eight results per word, with value i in
bits `[64i +: 64]`, and writes them to consecutive addresses. A chunk whose
length is not a multiple of eight ends with a partial word whose unused
lanes are zero.

**Chained control.** Both streamers use `ap_ctrl_chain`-style control:

* `ap_ready` means the one-deep command register is free, so the host
  queues chunk n+1 while chunk n runs.
* `ap_done` rises when a chunk completes and stays high until the host
  answers with `ap_continue`.
* While `ap_done` is unacknowledged, the following chunk may run but may
  not complete. This is the back pressure that keeps the host and the
  accelerator in step.

**Chunks and groups.** The host must cut chunks on whole path groups. A
chunk of 1000 paths is, for example, eight groups of 125. Each chunk then
holds complete groups in group > asset > timestep > path order, and its
results are complete tiles. The chunk size and the group size are
otherwise independent run-time choices.

**The host's job**, modelled in `tb/cu_host.sv`:

* reorder each chunk;
* copy it into HBM;
* start the input streamer on it;
* start the result streamer on the matching result region;
* after `ap_done`, copy the results back.

## Interfaces and timing

* **Clock and reset.** One clock. `rst_n` is an asynchronous, active-low
  reset of all control state; data memories are not reset.
* **Streams.** All internal streams are valid/ready. A stalled output
  holds its value; the reduction and both streamers check this with
  assertions.
* **Kernel.** Each dataflow stage is one register stage and accepts one
  element per cycle when not back-pressured. The latency from an input
  element to the reduction buffer is four cycles; from the last element
  of a group to its first served value, one more. `ap_done` pulses for
  one cycle when the run's last result has been accepted downstream.
* **Parameter load.** `cfg_we` / `cfg_asset` / `cfg_data` write one
  asset's `heston_cfg_t` (11 × 64 bits) per cycle, before `ap_start`.
* **Memory ports** (per unit):
  * Read: `rd_req_valid`, `rd_req_ready` and `rd_req_addr` (28-bit word
    address, 16 GiB) for requests; `rd_rsp_valid` and `rd_rsp_data` for
    in-order responses.
  * Write: `wr_valid`, `wr_ready`, `wr_addr` and `wr_data`.

  These are simple stand-ins for AXI4 masters on HBM pseudo-channels.
* **Top.** In `stac_a2_top`, every per-unit port is an unpacked array
  `[NUM_CU]`. The units share only clock and reset.

## Where this RTL departs from the accelerator it follows

* **Arithmetic.** It uses Q24.40 fixed point instead of IEEE double, and
  there is no single-precision build. The benchmark's float runs would
  use the same 64-bit datapath.
* **Operators are combinational.** Each stage does its whole computation
  in one clock cycle. This gives the right rate (one element per cycle)
  but not a realistic clock: the published stages are deep HLS
  pipelines, with hundreds of cycles of latency per timestep. Pipelining
  `qe_variance`, `fx_exp` and the other operators is the first change
  needed before synthesis for 300 MHz. Because of the loop interchange,
  no stage needs to change for it, beyond retiming the state stores'
  read-to-write distance, which is a whole path row.
* **Dataflow regions.** The published kernel is described as six
  concurrent dataflow regions, of which four are named: variance,
  log price, exponential and path reduction. Here there are five stages,
  with the loop-nest sequencer separate and the reduction's fill and
  serve sides inside one module. The log-price draw travels through the
  variance stage rather than arriving on a second input stream.
* **Uniform draw.** The QE exponential branch uses U = Φ(Zv). How the
  benchmark obtains its uniform is not given.
* **Memory interfaces.** The memory ports are a simplified in-order
  request/response interface, not AXI4. The reduction tile is modelled
  with asynchronous reads.
* **Group count.** The sequencer computes the number of path groups and
  the last group's size in hardware, rather than receiving them from the
  host.
* **Not in the RTL:**
  * HBM itself;
  * PCIe DMA and the vendor shell;
  * the host program and its multithreaded reordering.

  The testbenches model the host and the HBM.

## Problem sizes

The five benchmark sizes all have 25 000 paths. Their data points are 64
bits each:

| Size | Assets | Timesteps | Data |
|------|--------|-----------|------|
| Tiny | 5 | 126 | 252 MB |
| Small | 10 | 126 | 504 MB |
| Medium | 20 | 252 | 2 GB |
| Large | 30 | 504 | 6 GB |
| Huge | 50 | 1260 | 25.2 GB |

All five fit the defaults: at most 50 assets and 1260 timesteps, and paths
processed in groups of at most 128. The whole data set never has to be
resident in HBM. Only the chunks in flight do: a 1000-path chunk of Huge
is about 1 GB of input.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the
block against an independent double-precision model (`tb_ref_pkg`),
checks throughput where a rate matters, and prints
`TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it shows |
|-----------|---------------|
| `tb_heston_param_table` | Writes, both read ports, out-of-range assets |
| `tb_path_group_sequencer` | Tags for many run shapes, short last groups, one element per cycle |
| `tb_variance_path_qe` | Both QE branches against the real-valued model to 10⁻⁸; state seeding |
| `tb_log_price_path_qe` | Log-price recurrence over several steps and groups |
| `tb_asset_path_exponential` | `exp` over the whole useful range |
| `tb_ls_path_reduction` | Max over assets, bank overlap, fill stall, output order and rate |
| `tb_input_streamer` | Word unpacking, queued commands, `ap_continue` back pressure, random memory latency |
| `tb_result_streamer` | Packing, partial last word, queued commands, back pressure |
| `tb_stac_a2_kernel` | Whole kernel against the reference run; one element per cycle |
| `tb_compute_unit` | Kernel + streamers with a host model and HBM model, several chunks |
| `tb_stac_a2_top` | Three units at reduced sizes, all running at once |
| `tb_stac_a2_top_full` | Six units at the default parameters |

In `tb_stac_a2_top`, the test fails unless each of these has happened:

* queued input and result chunks;
* `ap_done` back pressure;
* a reduction fill stall;
* both QE branches;
* three or more path groups in a run;
* a short last group;
* a partial result word.

`tb_stac_a2_top_full` runs the top at its default parameters (six units,
`MAX_ASSETS = 50`, `MAX_STEPS = 1260`, `MAX_GROUP = 128`), with one job per
unit. The jobs together use all 50 asset slots, all 1260 timesteps and
full 128-path groups. It checks every result against the reference.

### Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/stac_a2_pkg.sv tb/tb_ref_pkg.sv tb/hbm_model.sv tb/cu_host.sv \
    tb/tb_stac_a2_top.sv --top-module tb_stac_a2_top
./obj_dir/Vtb_stac_a2_top
```

Other testbenches:

* For a single block, list `rtl/stac_a2_pkg.sv`, `tb/tb_ref_pkg.sv` and
  the block's testbench. Verilator finds the block's own file through
  `-Irtl`.
* `tb_stac_a2_top_full` takes the same file list as `tb_stac_a2_top` and
  runs in well under a minute.

### Changing the design

* **Bigger runs.** Raise `MAX_GROUP`, `MAX_STEPS` or `MAX_ASSETS` on
  `stac_a2_top`. The reduction tile grows as `2 × MAX_STEPS × MAX_GROUP`
  words per unit.
* **Number format.** Change it in `stac_a2_pkg` (`FX_F`). The testbench
  tolerances in `cu_host` and in the block testbenches assume about 40
  fraction bits.
