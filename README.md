# Phi: a pattern-based two-level sparse accelerator for spiking layers

A spiking neural network layer multiplies a binary spike matrix **A** (M rows × K inputs)
by a weight matrix **W** (K × N). Spike matrices are sparse, but their ones are not
random: if K is cut into short slices, the same few bit patterns come back again and again
across rows. This design exploits that. Each 16-bit slice of a spike row is written as

    row = pattern + correction

* The **pattern** comes from a small per-slice dictionary of 128 patterns chosen offline.
  Its product with the weights, pattern × W-slice, is computed offline as well. So at run time
  the pattern costs one table look-up and one vector add, whatever its number of ones.
  This is **level 1** (vector sparsity). A row may also use "no pattern".
* The **correction** holds +1 where the row has a one the pattern lacks, and −1 where the
  pattern has a one the row lacks. With a good dictionary it has only 0–2 nonzeros. Each
  nonzero costs one signed weight-row add. This is **level 2** (element sparsity).

The result is exact: `A·W = Σ PWP[pattern] + Σ (±1)·W[row]`. It is not an approximation.
The hardware has two engines, one per level, whose partial sums are added before the
spiking (LIF) neurons. It also has a preprocessor that turns raw spike rows into the two
levels on the fly.

Throughout, a *partition* is a 16-column slice of K. A *PWP* (pattern-weight product) is
one dictionary pattern times that partition's 16 × 32 weight tile: 32 numbers.

## What one run computes

`phi_top` computes one output tile:
* up to 256 rows (M);
* 32 output neurons (N);
* up to 112 partitions (K ≤ 1792) per pass.

The membranes of the 256 × 32 neurons persist across runs, so a run is one time step of one
tile. Larger layers are split by the host:
* **M and N:** more tiles.
* **K:** consecutive passes run with `cfg_fire = 0`. The partial sums then stay in the
  buffers, and only the final pass evaluates the neurons.

```
 spike rows ──► pattern matcher ──► compressor ──► packer ──► pack FIFO ──► L2 processor ──► L2 psum (4 banks) ─┐
 (16 bits per     │ 128-stage          drop empty    8-unit       4 KB        dispatcher, reconfig.            │
  partition)      │ systolic chain     rows, list    packs,                   adder tree, crossbar              ├─► + ─► 32 LIF ─► spikes
                  ▼                    nonzeros      2 windows                                                   │
             pattern-ID buffer ──► prefetcher ──► PWP buffer (16 banks) ──► L1 processor ──► L1 psum ────────────┘
             (256 × 112 IDs)          │ DRAM                                16→8 crossbar, 8×32 adder tree
                                      ▼
                           pattern-weight products
```

`phi_controller` sequences the phases of a run:

1. **PRE:** the host streams spike rows partition by partition, in increasing order. Each
   row goes through the matcher; its pattern ID is stored and its correction is compressed
   and packed. The L2 processor executes packs as they arrive, so level 2 is finished
   almost as soon as the last row goes in.
2. **DRAIN:** the packer's open windows are flushed. The controller waits until the
   preprocessor and the L2 engine are empty.
3. **PF / L1**, for each group of 16 partitions:
   * the prefetcher loads only the PWPs this group's rows actually use;
   * the L1 processor then sweeps all rows.

   A separate group sequencer runs these steps. A group starts as soon as the matcher has
   written an ID of a later partition, because then all of the group's IDs exist. Group 0
   of a large tile therefore runs in the background of steps 1 and 2, and only the last
   group waits for the drain.
4. **NEURON:** one row per cycle, L1 + L2 partial sums go to the 32 LIF neurons. The
   spikes leave on `spk_*`, and both partial-sum rows are cleared.

## The preprocessor

### Pattern matcher (`phi_pattern_matcher`, `phi_matcher_pe`)

The matcher is a chain of 128 stages, one per dictionary entry. Stage *i* holds pattern *i*.
A row enters with the "no pattern" candidate: its correction is the row itself, and its cost
is popcount(row).

Every stage computes its own correction and cost:
* `pos = row & ~pattern`
* `neg = ~row & pattern`
* cost = popcount(pos | neg)

The stage replaces the travelling candidate if its cost is lower. On a tie, the stage also
wins if the candidate is still "no pattern", because a pattern hit moves work to the cheap
level-1 path. An all-zero pattern slot never matches.

Timing: one row per cycle, latency 128 cycles. There is a single valid/ready stall for the
whole chain. A partition's patterns are written while the chain is empty (`pat_ready`).

### Compressor (`phi_compressor`)

The compressor drops rows with no correction. For the other rows it lists the column
(0–15) and sign of each nonzero.

A pack has 8 units and every row needs one of them for its running partial sum. So a
compressed row carries at most 7 nonzeros. A rarer, denser row is split into several
compressed rows, one per cycle. Each piece later adds into the same partial sum.

### Packs and the packer (`phi_packer`)

A pack is the unit of work of the L2 engine: 8 units plus metadata, 106 bits in all.

| field | bits | meaning |
|---|---|---|
| `u[7:0].is_psum` | 1 each | unit is the partial sum of one of the pack's rows, or a nonzero |
| `u[7:0].idx` | 4 each | weight row (0–15) for a nonzero; row slot (0–3) for a partial sum |
| `u[7:0].neg` | 1 each | the nonzero is −1 |
| `row_units[3:0]` | 4 each | units used by each row; this configures the adder tree |
| `row_id[3:0]` | 8 each | output row of each slot; this addresses the partial sums |
| `n_rows` | 3 | rows in the pack, 1–4 |
| `part` | 7 | partition; this selects the weight tile |

Each row is laid out as its partial-sum unit followed by its nonzeros.

The packer keeps two open packs ("windows"). An incoming row fits a window if two
conditions hold:
1. it has room for the row's `nnz + 1` units;
2. no row already there uses the same partial-sum bank. The bank is row index mod 4.

Condition 2 is what lets the L2 engine read and write all of a pack's partial sums in one
cycle from four single-ported banks.

Choosing a window:
* If several windows fit, the fullest one takes the row.
* If none fits, the fullest window is sent to the pack FIFO (an *eviction*) and the row
  starts a fresh pack there.
* A pack holds one partition only, so a change of partition flushes both windows.

The pack FIFO (`phi_pack_buffer`) holds 309 packs (4 KB).

## Level-2 engine (`phi_l2_processor`)

The L2 engine accepts a pack every cycle. It works in two stages: the pack register, then
one combinational execute stage that does the following.

* It reads the pack's 16 × 32 weight tile from `phi_weight_buffer`, whose slot is
  partition mod 32.
* It reads the partial sums of the pack's rows. Each row is in a different bank, so all
  reads happen at once.
* `phi_dispatcher` builds the 8 adder-tree channels. Each channel is a weight row or a
  partial sum, negated if the unit is −1.
* `phi_reconfig_adder_tree` sums consecutive runs of channels, one run per row, with run
  lengths taken from `row_units`. An example is 3 + 3 + 2 channels for three rows.
* Each sum is written back to its row's bank through a 4 × 4 crossbar.

A row that appears in two consecutive packs reads the value the previous pack wrote at the
clock edge between them, so there is no hazard.

## Level-1 engine

### Prefetcher (`phi_prefetcher`)

The PWP buffer holds one group of 16 partitions: 16 banks × 128 PWPs × 32 bytes = 64 KB.
Usually only a minority of the 128 PWPs of a partition is used by a tile. The prefetcher
therefore works in two passes:
1. It scans the tile's pattern IDs for the group, one row (16 IDs) per cycle, and marks
   which IDs occur in each partition.
2. It issues one DRAM read per marked entry, at line address
   `cfg_pwp_base + partition·128 + ID − 1`, with up to 4 requests outstanding.
   Responses are written to the bank of their partition.

In the full-size test, 1 780–1 800 of 2 560 possible PWPs are loaded. Real activations use
far fewer.

### L1 processor (`phi_l1_processor`)

Each cycle the L1 processor reads a row's 16 pattern IDs for the current group.
* If at most 8 are nonzero, a 16-to-8 crossbar sends those banks' PWPs into an 8-channel,
  32-lane adder tree. The sum is added to the row's L1 partial sum in the same cycle.
* If more than 8 are nonzero, the first 8 go in this cycle and the rest in a second cycle.

A row without any pattern still costs one cycle. This is simple zero skipping; the pattern
density is high enough that more elaborate skipping gains little. A pass therefore takes
`rows + rows with more than 8 IDs` cycles.

## Neurons (`phi_lif_array`)

There are 32 leaky integrate-and-fire neurons, shared by the 256 rows of the tile. The
membrane memory is 256 × 32 × 16 bits. For each row they compute:

    V' = V − (V >>> cfg_leak) + I_L1 + I_L2
    spike = V' ≥ cfg_vth
    V ← spike ? 0 : V'

`cfg_leak = 0` gives a leak-free integrate-and-fire neuron. `clear_membrane` zeroes all
membranes, for example between samples.

## Number formats and memories

| item | this design | source of the number |
|---|---|---|
| weight, PWP | 8-bit signed | follows from 64 KB PWP buffer / (16 × 128 × 32) |
| partial sum, membrane | 16-bit signed, wrapping | own choice |
| pattern ID | 8 bits, 0 = none, 1–128 | 129 codes are needed |
| pattern-ID buffer | 256 rows × 7 groups × 16 IDs × 8 bits = 28 KB | size as specified |
| PWP buffer | 16 banks × 128 × 32 × 8 bits = 64 KB | as specified |
| weight buffer | 32 tiles × 16 × 32 × 8 bits = 16 KB | as specified |
| pack FIFO | 309 × 106 bits ≈ 4 KB | as specified |
| L1 + L2 partial sums | 2 × 256 × 32 × 16 bits = 32 KB | specified total is 128 KB, see below |

A PWP is a sum of up to 16 weights. The 8-bit PWP format therefore limits how large the
weights may be, or it must be scaled offline. The end-to-end test uses weights in −7…7.

## Driving the top level

1. Write the weight tiles of up to 32 partitions: `w_we`, `w_part`, `w_row`, `w_data`.
2. Set `cfg_*` and pulse `start`.
3. For each partition in turn:
   * wait for `pat_ready`;
   * write its 128 patterns: `pat_we`, `pat_addr` = ID − 1, `pat_data`;
   * stream its rows with the valid/ready pair `act_valid` / `act_ready`, giving `act_row`,
     `act_part` and `act_bits`.
4. Pulse `act_done` after the last accepted row.
5. The PWPs must already be in DRAM. The DRAM read port is `dram_req_*` (valid/ready) and
   `dram_rsp_*` (in-order data).
6. With `cfg_fire = 1`, `spk_valid` then delivers one 32-bit spike word per row, followed by
   `done`.

The `stat_*` outputs count packs, evictions, PWP loads, two-cycle L1 rows, L1 cycles and
L2 row updates.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. Each compares against values
computed independently in the testbench:

* **Matcher:** brute-force best pattern, plus latency and throughput.
* **Compressor:** every nonzero exactly once, chunk sizes, back-pressure.
* **Packer:** a reconstruction of every row from the packs, a bank-conflict check per pack,
  and directed eviction cases.
* **FIFOs and buffers:** reference models.
* **Dispatcher and adder tree:** reference sums, including the 3/3/2 split.
* **L2 engine:** sparse products accumulated into real buffers.
* **Prefetcher:** exactly the used PWPs are loaded.
* **L1 engine:** sums and the cycle count `rows + rows with more than 8 IDs`.
* **LIF array:** reference neuron model.
* **Controller:** phase order for several partition counts; no group starts before its
  pattern IDs are complete, and some groups start while rows still arrive.

`tb_phi_top` runs the whole accelerator at its default sizes:
* 256 rows and 20 partitions (K = 320, two groups, the second partly used);
* random 2–8-bit patterns and PWPs held in a DRAM model with random stalls;
* spike rows that are empty, exact patterns, patterns with one or two flipped bits, one-hot,
  or dense.

It runs three time steps:
1. With an unreachable threshold. Every membrane must equal the plain spike × weight product.
2. With leak and a threshold. The spikes must match a LIF model.
3. With K split into two passes, the first with `cfg_fire = 0`.

It also counts how often each mechanism occurs and fails if any of them never does:
pattern hits, no-pattern rows, −1 corrections, compressor splits, bank conflicts, evictions,
partition flushes, two-cycle L1 rows, L1 groups started while rows still arrive, input
stalls, split-K accumulation and output spikes.
A run is about 14 000–16 000 cycles per time step and simulates in under a minute.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/phi_pkg.sv tb/tb_phi_top.sv \
          --top-module tb_phi_top -o sim && obj_dir/sim
```

## Where this design departs from the published architecture, or fills gaps

* **Partial-sum storage** is 2 × 16 KB, enough for one 256 × 32 output tile per level.
  The published buffer is 128 KB, and its use of the extra capacity (more N tiles in
  flight, double buffering) is not described.
* **Pattern-ID width:** the published 28 KB pattern-index buffer fits 7-bit IDs for
  128 partitions, but 128 patterns plus "none" need 8 bits. This design uses 8 bits, which
  gives 112 partitions per pass.
* **Overlap:** level-1 work overlaps preprocessing group by group. The last group, and a
  tile with a single group, must wait for their IDs, so they run after the drain. Spikes
  leave the chip instead of feeding the preprocessor of the next layer directly, so
  preprocessing of the next layer does not overlap this layer's neuron phase.
* **Reconfigurable adder tree:** it is written as a segmented sum, one masked sum per row
  slot. The published tree adds only four links to a plain 8-input tree. That structure is
  not reproduced, though the results are identical.
* **Rows with more than 7 corrections** are split by the compressor. The published
  architecture assumes they do not occur.
* **Own choices:** packer window choice (fullest fitting window), window count (2) and bank
  count (4, bank = row mod 4); the prefetcher's two-pass scan and DRAM layout; the LIF
  equation with a shift leak and hard reset; the controller and all host interfaces.
* **Pattern reload:** the dictionary is loaded into the matcher once per partition and
  the matcher must drain first. This costs 128 + 128 cycles per partition, and dominates
  the run time at small M.
* **Only k = 16** is built. Clock rate, process and power are not modelled.
* **DRAM** is not part of the RTL. `tb/phi_dram_model.sv` is a simple latency and
  back-pressure model.

## Files

* `rtl/phi_pkg.sv`: sizes, widths and the row, compressed-row, unit and pack types.
* `rtl/phi_top.sv`: the accelerator.
* One file per block, as named above.
* `tb/tb_<module>.sv`: the testbenches.
