# Statistical ABFT on an INT8 systolic array

Large language models running on a systolic-array accelerator tolerate a
surprising amount of arithmetic error, but not every kind. A few very large
errors in a layer that feeds a normalisation (LayerNorm/RMSNorm) ruin the
output. Many small errors, or a few large errors in a layer followed by
softmax or re-quantisation, barely matter. Classical algorithm-based fault
tolerance (ABFT) adds checksums to every GEMM and recomputes the whole tile
whenever a checksum disagrees. That wastes most of the energy saved by
running the array below its safe supply voltage.

This RTL adds a *statistical* decision stage to checksum-protected systolic
arrays. The checksums still locate the error per output column. A small
unit then measures how large the errors are and how many there are, and it
requests recovery only when the tile falls into the "critical region". That
is the region where errors are both large enough and frequent enough to hurt
the model. The design follows the statistical ABFT scheme of ReaLM (Xie et
al., DAC 2025). Where that description stops, this implementation makes its
own choices; they are listed in the section "What is this design's own".

The core, `realm_top`, holds two N x N INT8 arrays: one weight-stationary (WS)
and one output-stationary (OS). The published design uses N = 256. The RTL
defaults to N = 128 for tool-memory reasons (section 8); N = 256 is a legal
value, and every word width is sized for it. Each array is extended with checksum
hardware, and both share one statistical unit.

## 1. The detection rule

Take one tile Y = W X, with N x N operands. For each output column j the
hardware forms two 32-bit numbers:

* `e^T Y_j`: the sum of the N outputs actually computed in column j.
* `e^T W X_j`: the same sum predicted from the column sums of W, `e^T W`.

With no error the two are equal. Their difference `d_j` is the total error in
column j. Per tile the statistical unit computes:

```
MSD        = sum_j |d_j|                          matrix sum deviation
theta_mag  = b - (a - 1) * log2(MSD)              log2 of a magnitude
freq_eff   = count_j ( |d_j| > 2^theta_mag )      significant columns
recover    = freq_eff > theta_freq
```

Where the formula comes from: on a plot of log2(error frequency) against
log2(MSD), the bad region of a layer is bounded by a sloped line
`log2(freq) = a*log2(MSD) - b`. For *resilient* layers it is also bounded by
a horizontal line `freq = theta_freq`. If all errors have the same size,
`mag = MSD/freq`. On the sloped line this gives
`log2(mag) = b - (a-1)*log2(MSD)`. Errors smaller than that are harmless
whatever their number, so only larger ones are counted. The count is then
compared with the frequency bound.

* Use `theta_freq = 0` for *sensitive* layers, those followed by a
  normalisation. There the region reaches down to the frequency axis, so one
  significant error is enough to recover.
* `a`, `b` and `theta_freq` are fitted offline for each layer type and each
  acceptable accuracy loss. They are therefore run-time inputs, not
  constants.

Worked example: MSD = 2^24, a = 1.5, b = 20. This gives theta_mag = 20 - 0.5*24
= 8, so only columns whose deviation exceeds 2^8 = 256 count.

## 2. Checksums on the weight-stationary array (`ws_abft_array`)

```
            x_j (skewed)           checksum column (16-bit weights)
   row 0 ->[W00][W10] ... [Wn0] -> [sum_c Wc0] |
   row 1 ->[W01][W11] ... [Wn1] -> [sum_c Wc1] |  partial sums flow down
   ...                                          v
   row n ->[W0n][W1n] ... [Wnn] -> [sum_c Wcn] --> e^T W x_j   (32 bit)
             |     |         |
            (+)-->(+)-- ... (+)--------------------> e^T Y_j   (32 bit)
            bottom adder chain, one column per cycle
```

PE (r,c) stores `W[c][r]`. Element r of input column `x_j` enters row r and
moves right. Column c accumulates `y_c = sum_r W[c][r] x_r` on the way down.
Two things are added to the array:

* **Checksum column.** An extra column of PEs on the right stores the row
  sums of W. These are 16-bit weights: the sum of 256 INT8 values needs 16
  bits. The column sees the same inputs once they have crossed the array,
  and its bottom output is `e^T W x_j`.
* **Bottom adder chain.** A chain of adders under the array adds the N
  outputs of `x_j` as they leave the columns. Each column leaves one cycle
  after its left neighbour, and the chain has one register per column. So
  the chain's running sum stays aligned with the outputs and ends at the
  right edge as `e^T Y_j`.

The two checksums reach the right edge together and are delivered as one pair.

Timing, for an input column `x_j` whose element 0 enters in cycle `t_j`:

| event                                   | cycle            |
|-----------------------------------------|------------------|
| element r on `x_in[r]`                  | `t_j + r`        |
| output `y_c` on `y_out[c]` (`y_valid[c]`)| `t_j + N + c`    |
| checksum pair of `x_j` (`pair_valid`)   | `t_j + 2N`       |

Input columns can follow each other every cycle. A tile is N input columns,
which produce N pairs.

**Loading weights.** Hold `w_load` high for N cycles with one weight row per
cycle on `w_row`, array row N-1 first. The checksum weight of each row is
summed from `w_row` by an adder tree while the row is loaded. So the array
never needs a precomputed `e^T W`.

## 3. Checksums on the output-stationary array (`os_abft_array`)

```
   (e^T W)[k] adders          PE grid, y_ij stays in place
   w row 0 ->(+)->[y00][y01] ... [y0n]      x columns enter at the top
   w row 1 ->(+)->[y10][y11] ... [y1n]      and move down
   ...        |
   w row n ->(+)->[yn0][yn1] ... [ynn]
              |     |     |         |       (outputs drain downward)
              +->[eTWX0][eTWX1]...[eTWXn]   16-bit checksum PEs
                    |     |         |
                 [acc] [acc] ...  [acc]     e^T Y_j accumulators
```

Row i receives `W[i][k]` from the left and column j receives `X[k][j]` from the
top. PE (i,j) accumulates `y_ij`. Three things are added:

* **Adder column (left).** A column of adders sums the weights entering the
  rows into `(e^T W)[k]`. It has one register per row, so that the sum stays
  in step with the skewed streams.
* **Checksum row.** A row of 16-bit checksum PEs receives `(e^T W)[k]` at its
  left end and passes it right. It multiplies it by the inputs leaving the
  bottom of each column, so PE j ends up holding `e^T W X_j`.
* **e^T Y accumulators.** At the end of the tile the outputs are shifted
  down out of the array, one row per cycle. A row of accumulators adds each
  column's outputs as they pass.

A controller inside the array sequences one tile (K = N). Let `s` be the
cycle in which `start` is high:

| event                                              | cycle                  |
|----------------------------------------------------|------------------------|
| `start` clears all accumulators                    | `s`                    |
| weight `W[i][k]` on `w_in[i]`                      | `s + 1 + k + i`        |
| input `X[k][j]` on `x_in[j]`                       | `s + 1 + k + j`        |
| drain cycle d: `y_out[j] = y_(N-1-d),j`            | `s + 3N + d`, d < N    |
| pair of column j (`pair_valid`)                    | `s + 4N + j`, j < N    |
| `busy` falls, next `start` allowed                 | `s + 5N`               |

The pairs leave one per cycle because the statistical unit takes one pair
per cycle.

## 4. The statistical unit (`stat_unit`, `log2_linear`, `countif`)

```
e^T Y --\                    +--> accumulator --> MSD --> log2_linear --> theta_mag
         (-) -- |d| ---------+                    (a, b)                      |
e^T WX -/                    +--> buffer[0..N-1] -----> countif(|d| > 2^theta)
                                                              |
                                                  freq_eff > theta_freq --> recover
```

* **Per pair.** The subtractor forms `d`. Its magnitude is written into the
  next of N buffer registers and added to the MSD accumulator.
* **After the N-th pair.**
  1. `log2_linear` computes theta_mag (one register stage).
  2. `countif` compares all N buffer entries at once against the single
     linear threshold `2^theta_mag` and counts the hits.
  3. `freq_eff` and `recover` are registered.
* **Latency.** `res_valid` pulses three cycles after the cycle that carried
  the N-th pair. During the two cycles in between, `busy` is high and no
  pair may arrive; an assertion checks this.
* **Log domain.** log2 is taken as the position of the leading one plus the
  next 4 bits (piecewise-linear: log2(1+f) ~ f). The threshold is rebuilt on
  the same grid as `(1.f) << int`. So theta_mag has a resolution of 1/16 of
  an octave.

Number formats:

| quantity          | format                         |
|-------------------|--------------------------------|
| operands          | signed INT8                    |
| outputs, checksums| 32-bit two's complement        |
| `e^T W`           | signed 16 bit                  |
| MSD               | unsigned 40 bit (32 + log2 N)  |
| `a`               | unsigned Q4.4 (1.0 = 16)       |
| `b`, `theta_mag`  | signed Q11.4                   |
| `theta_freq`, `freq_eff` | unsigned, clog2(N+1) bits |

(a-1)·log2(MSD) is rounded toward minus infinity, and theta_mag saturates
at 16 bits. If MSD = 0, theta_mag is the largest value, so nothing counts.

For N = 256 every per-tile value fits its word exactly:

* an output is at most 256·2^14 = 2^22 in magnitude;
* a column sum is at most 2^30;
* `e^T W` is at most 2^15.

So a difference is only ever non-zero because of an error. A single flip of
bit 31 gives |d| = 2^31, which the unsigned magnitude still holds.

## 5. The core (`realm_top`)

`mode` (`DF_WS` or `DF_OS`) chooses the array that receives the next tile.
The other array sees no valid data. Outputs, output valids and checksum pairs
are multiplexed from the selected array into `y_out`/`y_vld` and into the
shared statistical unit. Change `mode` only while both arrays and the
statistical unit are idle.

Both arrays share the operand buses:

* **WS:** `w_bus` carries weight rows during `w_load`, and `x_bus`/`x_vld`
  carry the skewed input columns.
* **OS:** `w_bus`/`w_vld` carry the skewed weight rows and `x_bus`/`x_vld`
  the skewed input columns.

`recover` is only a request. Acting on it is the job of the system around
the core, for example recomputing the tile at nominal voltage or raising
the supply.

`inj_flip[N]` and `inj_bit` flip one bit of selected array outputs, before
the `e^T Y` adders see them:

* **WS:** bit `c` of `inj_flip` applies to the output of column c that is
  leaving in that cycle.
* **OS:** bit `j` applies to the drained output of column j.

This models timing errors as bit flips in the INT32 accumulation results,
and it is how the testbenches create errors. Tie `inj_flip` to zero in a
real system.

## 6. What is this design's own

These parts follow the published scheme:

* the structure of both checksum arrangements;
* the widths printed for them (16-bit `e^T W`, 32-bit `e^T W X` and
  `e^T Y`);
* the four parts of the statistical unit;
* the formula for theta_mag;
* the strict `>` comparisons;
* the 256 x 256 size, reachable by setting `N = 256`; the default is 128.

The following are this design's own choices:

* **One statistical unit for both arrays.** It is shared through a mode
  select; the published drawings show one unit per array.
* **Magnitude accumulation.** MSD accumulates |d|, not signed d, so errors
  of opposite sign cannot cancel.
* **theta_freq is a plain count.** It is compared with freq_eff directly, as
  the published text states. The published plot labels the bound
  log2(freq) = theta_freq; that reading is not followed.
* **Number formats.** The log2 approximation, the fraction width and the
  fixed-point formats of a, b and theta_mag are this design's.
* **countif in the linear domain.** The buffer holds |d| and countif
  compares it with 2^theta_mag instead of taking N logarithms.
* **Weight path.** Weights load by shifting down the columns, and the WS
  checksum weights come from an adder tree during the load.
* **OS tile control.** The OS controller (fixed cycle counts, K = N),
  draining by shifting, and serial delivery of pairs are this design's.
* **Skewed interfaces.** The arrays expect skewed inputs and produce skewed
  outputs; there are no skew or de-skew FIFOs.
* **Reset.** An asynchronous active-low reset clears every control and
  datapath register except the difference buffer, which is always written
  before it is read.
* **Test hook.** The injection inputs are added for testing.

Not included, because the published work does not design them:

* the memories that feed the arrays;
* tiling of whole LLM layers and accumulation across K tiles;
* the recovery mechanism (recomputation, DVFS);
* the vector unit used for non-batched GEMV in the decode stage.

## 7. Sizing against the evaluated models

Model sizes below come from general knowledge, not from the published work:

* **OPT-1.3B:** hidden size 2048, FFN 8192.
* **LLaMA-3-8B:** hidden size 4096, FFN 14336, V projection 4096 x 1024.

Every GEMM of these layers is cut into N x N x N tiles (128 at the default,
256 in the published configuration). The per-tile
bounds in section 4 do not depend on model size, so both models run tile by
tile. The surrounding tiling and K-accumulation are not part of this RTL.
Non-batched decode GEMVs use one of 256 input columns and belong on a
vector unit.

## 8. Verification and use

Each module has a self-checking testbench in `tb/`. The reference
arithmetic in `tb/tb_golden_pkg.sv` is written separately from the RTL.

| testbench            | size   | what it checks                                             |
|----------------------|--------|------------------------------------------------------------|
| `tb_pe_ws`           | 1 PE   | weight load/hold, forwarding, w*x+p for 8- and 16-bit weights |
| `tb_pe_os`           | 1 PE   | accumulate, clear, drain priority, forwarding                |
| `tb_log2_linear`     | –      | theta_mag against the reference over the whole MSD range   |
| `tb_countif`         | N=256  | count against the reference, thresholds negative to saturating |
| `tb_stat_unit`       | N=16   | MSD, theta, freq_eff, recover, 3-cycle latency, gaps between pairs |
| `tb_ws_abft_array`   | N=8    | every output value and cycle, every pair, with flips       |
| `tb_os_abft_array`   | N=8    | drain order and cycles, pairs, busy, with flips            |
| `tb_realm_top`       | N=16   | 12 tiles end to end (see below)                            |

**End-to-end test.** `tb_realm_top`, through `tb/realm_top_driver.sv`, runs
tiles on both dataflows. It checks every output value and cycle, the MSD,
theta_mag, freq_eff, recover and the result cycle of each tile. It counts
how often each of the following happens and fails if any never does:

* a WS tile with weight load;
* an OS tile with drain;
* a dataflow switch in each direction;
* a clean tile;
* a recovery request;
* errors tolerated because freq_eff stayed at or below theta_freq;
* small errors ignored because they stayed below theta_mag.

The same driver has also been run at N = 32 with six tiles, with no
failures. That is the largest size simulated. A simulation at the default
N = 128 was not run, nor one at 256. Building a simulator for two arrays of
16,384 (or 65,536) PEs each takes far longer than the build host allowed:
the N = 32 build alone took about 5 minutes, and build time grows with the
PE count.

**Running a test with Verilator**, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/realm_pkg.sv tb/tb_golden_pkg.sv tb/tb_realm_top.sv \
    --top-module tb_realm_top -o sim
./obj_dir/sim
```

Use the same command for any other testbench, changing the `--top-module`
name. Every test ends with a line `TB_RESULT checks=<n> failures=<m>`.

**Tool cost and the default size.** `verilator --lint-only` of `realm_top`
takes 25 s and 0.9 GB at N = 64, and 121 s and 3.5 GB at N = 128. Cost
grows with the PE count. A single array at N = 64 needs 0.47 GB.

At N = 256 this extrapolates to about 14 GB for the core and 7.5 GB for
each array. Linting the three side by side then needs more than 32 GB. That
is why the default is N = 128.

## 9. Files

| file                       | contents                                                  |
|----------------------------|-----------------------------------------------------------|
| `rtl/realm_pkg.sv`         | widths, pair struct, dataflow enum, log2/antilog functions |
| `rtl/pe_ws.sv`             | WS processing element (also the checksum-column PE)      |
| `rtl/pe_os.sv`             | OS processing element (also the checksum-row PE)         |
| `rtl/ws_abft_array.sv`     | WS array with checksum column and e^T Y adder chain       |
| `rtl/os_abft_array.sv`     | OS array with e^T W adders, checksum row, e^T Y accumulators, tile controller |
| `rtl/log2_linear.sv`       | theta_mag = b - (a-1) log2 MSD                           |
| `rtl/countif.sv`           | parallel threshold count                                 |
| `rtl/stat_unit.sv`         | subtractor, MSD accumulator, buffer, decision            |
| `rtl/realm_top.sv`         | the core: both arrays, shared statistical unit           |
| `tb/*.sv`                  | testbenches, reference package, end-to-end driver        |
