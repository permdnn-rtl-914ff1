# PermDNN engine: RTL for a permuted-diagonal fully-connected layer accelerator

A fully-connected layer computes `y = act(W x)`. This engine runs such layers
when `W` has been compressed into **block-permuted diagonal** form. The
`m x n` matrix is cut into `p x p` blocks. Each block holds exactly one
non-zero per row and one per column, so it is a diagonal whose rows have been
cyclically shifted. One small number per block, its permutation value
`PermV`, fixes where the non-zeros are. In block column `d` (`0 <= d < p`), the
non-zero sits in block row

    r = (PermV + d) mod p

So the matrix keeps `1/p` of its weights and needs no per-weight index. The
position of every non-zero is computed in hardware from `PermV`. The hardware
needs no CSR/CSC index walking and no load imbalance, yet it can still skip
zero activations dynamically.

The engine has the following parameters. All of them are package constants
in `rtl/permdnn_pkg.sv`:

| item | value |
|---|---|
| processing elements (PEs) | 32 |
| multipliers per PE | 8 × 16 bit |
| accumulators per PE | 128 × 24 bit, 8 banks of 16 |
| weight SRAM per PE | 16 sub-banks × 32 bit × 2048 rows (4-bit weight tags, 8 per row) |
| weight look-up table per PE | 16 × 16 bit |
| permutation SRAM per PE | 48 bit × 2048 rows (8 permutation values of 6 bits per row) |
| activation SRAM | 8 banks × 64 bit × 2048 rows = 64K activations of 16 bit |
| activation FIFO | 32 × 32 bit |
| pipeline | 5 stages |

At one multiply per multiplier per cycle this is 256 MACs per cycle.

## 1. Dataflow: one non-zero input column at a time

The engine works column by column. Take an input `x_j`. If it is zero, the
whole column `j` of `W` contributes nothing, so the engine never touches it.
If it is not zero, `x_j` and its index `j` are broadcast to every PE. Each PE
multiplies `x_j` by the weights of column `j` in the rows it owns, and adds
the products into those rows' accumulators.

The rows are split among the PEs in units of blocks:

- Let `nbr` be the number of block rows per PE.
- PE `r` owns block rows `r*nbr … r*nbr+nbr-1`.
- So PE `r` owns matrix rows `r*nbr*p … (r+1)*nbr*p - 1`.

Within a column, each block row has exactly one non-zero. A PE therefore has
`nbr` products to compute per column. With 8 multipliers it needs
`K = ceil(nbr/8)` cycles:

- In cycle `t` of a column, multiplier `m` serves block row `t*8 + m`.
- When `nbr` is not a multiple of 8, the spare multipliers of the last cycle
  stay idle.

The read path delivers the non-zero inputs:

    activation SRAM -> activation selector -> zero detector -> activation FIFO -> main controller -> all PEs

1. The **activation selector** (`act_selector`) reads `x` one 64-bit word
   (4 activations) at a time. Each read goes to the bank that holds that
   word.
2. The **zero detector** (`zero_detector`) takes one word and emits its
   non-zero lanes, lowest first, one per cycle, each with its index. A word
   that is all zeros costs it one cycle and produces nothing.
3. The **activation FIFO** (`act_fifo`) buffers `{x_j, j}` pairs.
4. The **main controller** (`main_ctrl`) pops one pair and broadcasts it for
   `K` cycles.

So the read path and the PEs run at different rates:

- The read path produces up to one non-zero per cycle.
- The PEs consume one every `K` cycles.

The FIFO absorbs the difference. It fills up when inputs are dense and drains
during runs of zeros. The top counts cycles with the FIFO full
(`n_fifo_full`). It also counts cycles in which the PEs waited for an empty
FIFO (`n_starve`).

## 2. Inside a PE

A PE (`pe`) is a 5-stage pipeline. Its control is driven by `pe_ctrl`.
Stage 0 is the main controller's issue register.

| stage | work |
|---|---|
| 1 | The command reaches the PE. `pe_ctrl` reads weight row `waddr` and permutation row `paddr`. |
| 2 | The SRAM data arrives. The weight LUT turns the 8 tags into 8 signed 16-bit weights, which are loaded into weight registers 1…8. |
| 3 | 8 multipliers form `x_j * w`, shifted right by 8 (the fractional bits). |
| 4 | The 8 accumulation selectors each add their product into one register of their bank. |

Lane enables (`t*8 + m < nbr`) travel down the pipeline with the data.
They switch off the multipliers that have no block row in the last cycle of
a column.

**Weight storage.** Weights are shared: a 4-bit tag picks one of 16 values in
the LUT. One 32-bit row of the weight SRAM holds the 8 tags of one cycle:

- Row `w_base + j*K + t` holds column `j`, cycle `t`.
- Tag `m` (bits `4m+3 : 4m`) is the weight of block row `t*8+m` in column `j`.

The 16 sub-banks are addressed as one flat 15-bit row space. The upper 4 bits
select the sub-bank, and only that sub-bank is enabled.

**Permutation storage.** Every block in block column `G = j div p` has its own
`PermV`:

- Row `perm_base + G*K + t` holds the 8 values of block rows `t*8 … t*8+7`.
- Field `m` is bits `6m+5 : 6m`.
- One permutation row serves `p` consecutive columns.

## 3. The accumulation selector: finding the row without an index

Each multiplier feeds its own accumulation selector and bank (`acc_sel_bank`).
A bank has `g = 16` registers and works in three steps:

1. **Index calculator.** It adds `PermV` and `d = j mod p`, compares the sum
   with `p`, and subtracts `p` when the sum is `>= p`. The result is the row
   `r` inside the block.
2. **Comparators and registers.** Register `k` has a comparator for the
   constant `slot*p + r`. Only the register whose comparator fires adds the
   product; the others hold.
3. **Slots.** A bank can hold `f = floor(16/p)` blocks at once, one per slot.
   `slot` says which of them the current cycle belongs to.

Saturation and reset:

- Accumulators saturate at the 24-bit limits.
- `clear` empties the bank at the start of each pass.

Each register feeds an activation unit (`act_unit`). Each unit can be set per
layer to either of two functions:

- **ReLU**, saturated to 16 bits.
- **tanh**, as a piecewise-linear curve in Q8.8:

      |a| < 0.5  -> |a|
      |a| < 1.5  -> 0.25 + |a|/2
      otherwise  -> 1.0

  The unit then restores the sign.

`j mod p` and `j div p` come from a reciprocal multiplication:
`floor(j * ceil(2^24/p) / 2^24)`. This is exact for `j < 2^16` and `p <= 64`,
so no divider is needed.

## 4. Passes: when the accumulators run out

A PE needs `nbr*p` accumulators, but it has only 128. Two schedules cover the
layers this design supports.

- **Single pass (`K <= f`).** All `K` block rows of each multiplier fit in its
  bank at once. Cycle `t` of a column uses slot `t`. The layer takes one
  stream over `x`.
- **Multiple passes (`K > f`).** The layer runs in `P = ceil(K/f)` passes.
  - Pass `q` streams the whole of `x` again, but issues only cycles
    `t = q*f … min(K,(q+1)f)-1`, using slots `t - q*f`.
  - At the end of the pass, those rows are final.
  - They are written out, and the accumulators are cleared for the next pass.

  Each pass skips zero inputs independently, so the zero detector's count is
  (zeros in x) × P.

Two examples:

- With `p = 10` a bank holds one block (`f = 1`). A PE with 13 block rows
  (`K = 2`) therefore needs 2 passes.
- With `p = 8` and 8 block rows per PE (`K = 1`, `f = 2`), one pass is enough.

The main controller runs this sequence for every pass:

    CLEAR -> STREAM -> DRAIN -> WRITE -> WWAIT

The steps are:

1. CLEAR clears the accumulators and starts the read path.
2. STREAM pops and broadcasts the non-zeros.
3. DRAIN waits 4 cycles for the PE pipeline to empty.
4. WRITE and WWAIT start the routing network and wait for it.

**Not built.** There is no schedule for layers with fewer than 8 block rows
per PE and very large `p`, where several columns would be processed in
parallel by different PEs. Such layers still run correctly (`nbr < 8` just
leaves multipliers idle), but they do not get the extra throughput. `p` must
be at most 16, because one `p x p` block must fit into one bank.

## 5. Activation memory and writing results back

The activation SRAM (`act_sram`) holds both `x` and `y` in one 64K-entry
index space. Words are interleaved across the banks. Activation index `a`
lives at:

    bank = (a/4) mod 8,   row = a/32,   lane = a mod 4

So a sequential read of `x` visits the banks in turn.

The outputs of PE `r` go to

    y index = out_base + r*stride + i,   stride = nbr*p rounded up to a multiple of 4

This layout has three consequences:

- Every PE's output starts on a word boundary.
- The padding lanes are written as zero.
- A following layer can read its input directly, with `in_base = out_base`,
  `n_in = 32*stride`. The zero padding columns are skipped for free.

The **activation routing network** (`act_routing`) writes `y` back after each
pass:

1. The 32 PEs form 8 groups of 4.
2. In every cycle, one PE of each group offers one word (4 values) of its
   finished rows. That is up to 32 values per cycle.
3. A crossbar sends each word to the bank its address falls in.
4. Group `g` starts at word `g mod nw` of each PE, where `nw` is the number of
   words per PE in the pass. This staggers the groups so they mostly hit
   different banks.
5. Remaining collisions are resolved by fixed priority: the lower group wins
   and the other retries. These are counted in `n_conflicts`.

During write-back the routing network has priority on the SRAM ports. The
read path comes next, and the host port is served only while the engine is
idle.

## 6. Loading and running a layer

The top module is `permdnn_top`. It has a simple host port that works only
while `busy` is low:

| `host_sel` | `host_addr` | `host_wdata` |
|---|---|---|
| `HOST_WEIGHT` | weight row of PE `host_pe` (15 bit) | bits 31:0, 8 tags |
| `HOST_PERM` | permutation row of PE `host_pe` (11 bit) | bits 47:0, 8 PermVs |
| `HOST_LUT` | LUT entry of PE `host_pe` (4 bit) | bits 15:0, signed Q8.8 weight |
| `HOST_ACT` | global activation word (index/4) | 4 activations, lane 0 in bits 15:0 |

To run a layer:

1. Write the rows with `host_we`.
2. Set `cfg` (`layer_cfg_t`):
   - `n_in`: number of inputs.
   - `nbr`: block rows per PE.
   - `p`.
   - `in_base` and `out_base`: multiples of 4.
   - `w_base` and `perm_base`.
   - `act_fn`.
3. Pulse `start`, and hold `cfg` until the one-cycle `done` pulse.
4. Read the results with `host_re`. `host_rdata` is valid one cycle later.

Numbers are signed 16-bit Q8.8. Products are shifted right by 8 before they
are accumulated in 24 bits. A layer's `m` rows are covered as
`32 * nbr * p >= m`. Rows beyond `m` belong to blocks whose weights are
loaded as zero.

## 7. Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`).
Each one:

- compares against values computed independently in the testbench;
- has a watchdog;
- ends by printing `TB_RESULT checks=… failures=…`.

`tb_permdnn_top` runs the whole engine at its full size (32 PEs, all default
parameters) through five layers:


| layer | what it exercises |
|---|---|
| 1: `p=4`, 16 block rows per PE, half the inputs zero, ReLU | single pass |
| 2: `p=10`, 13 block rows per PE, tanh | 2 passes |
| 3: `p=8`, dense input | FIFO full, bank conflicts |
| 4: `p=8`, 8 block rows per PE, 95 % zero inputs, tanh | PE starvation |
| 5: `p=4` | reads the first 256 outputs of layer 4 as its input |

For each layer the testbench checks:

- every output and every padding value, against a plain matrix-vector
  reference built from the same random weights and permutation values;
- the column, pass and zero-skip counts.

It also requires that each mechanism happened at least once: single and
multiple passes, zero skipping, bank conflicts, FIFO full, starvation, both
activation functions, idle multipliers, and layer chaining.

`tb_workloads` runs two published layer shapes at full size, again against
an independent reference:

- NMT-1 (2048 × 1024, `p = 8`, dense input), in one pass.
- Alex-FC7 (4096 × 4096, `p = 10`, about 21 % non-zero input), in two passes.

It checks every output and the pass, column and skip counts. It also bounds
the run time: at most `K` cycles per non-zero column plus one per input word,
per pass, plus a fixed overhead. Measured totals:

- NMT-1: 1103 cycles for 1024 non-zero columns.
- Alex-FC7: 2686 cycles for 2 × 816 columns.

The simulation takes about 1.5 minutes, mostly loading the weights.

To simulate with Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl rtl/permdnn_pkg.sv rtl/*.sv \
        tb/tb_permdnn_top.sv --top-module tb_permdnn_top
    ./obj_dir/Vtb_permdnn_top | grep TB_RESULT

Any other block works the same way with its own testbench. The package is
named first so that it is compiled before its users. Its second appearance,
through the wildcard, only gives a duplicate-declaration warning, which is
why `-Wno-fatal` is set. The full-size run takes about 20 seconds.

## 8. Sizes of published layers

These are the fully-connected layers of AlexNet (FC6–FC8) and of a
Stanford NMT LSTM (three shapes). The output rows are `m`, the inputs `n`.

| layer | m × n | p | nbr | K | f | passes | weight rows / PE | perm rows / PE |
|---|---|---|---|---|---|---|---|---|
| Alex-FC6 | 4096 × 9216 | 10 | 13 | 2 | 1 | 2 | 18432 / 32768 | 1844 / 2048 |
| Alex-FC7 | 4096 × 4096 | 10 | 13 | 2 | 1 | 2 | 8192 | 820 |
| Alex-FC8 | 1000 × 4096 | 4 | 8 | 1 | 4 | 1 | 4096 | 1024 |
| NMT-1 | 2048 × 1024 | 8 | 8 | 1 | 2 | 1 | 1024 | 128 |
| NMT-2 | 2048 × 1536 | 8 | 8 | 1 | 2 | 1 | 1536 | 192 |
| NMT-3 | 2048 × 2048 | 8 | 8 | 1 | 2 | 1 | 2048 | 256 |

All of them fit. The largest activation footprint is Alex-FC6: 9216 inputs
plus 32 × 132 outputs, within 64K. The weight memory as a whole holds
32 × 32768 × 8 = 8M four-bit tags. A fully-connected layer with `p = 100`
does not fit (`p <= 16`).

## 9. Departures and open points

- **Wrap test.** The block-row wrap is `sum >= p`, which is what "mod p"
  requires. With a strict `sum > p` test, a sum equal to `p` would not wrap and would
  land outside the block.
- **Groups and banks.** The routing groups are 4 consecutive PEs per bank
  group. Because of the interleaved address map, a group's word may target any
  bank, so the network is a crossbar with arbitration rather than fixed wiring
  from each group to one bank.
- **This design's own choices.** The following are not part of the
  published architecture:
  - the read path's word-wide handshake, with the zero detector working on
    whole words;
  - the Q8.8 number format and the tanh approximation;
  - the host port, the output layout and the FSM.
- **Re-streaming `x`.** `x` is read again from the activation SRAM in every
  pass. It is not kept in a buffer.
- **Memories.** The SRAMs are plain arrays with single ports and a one-cycle
  read. The clock rate (1.2 GHz in a 28 nm process), SRAM macros, area and
  power are outside this RTL.
- **Missing schedule.** The schedule for very sparse layers with few rows per
  PE (several columns at once) is not built (section 4).
