# Online checksum checking for a structured-sparse systolic tensor array

A systolic array that multiplies a dense activation matrix `A` by a pruned
weight matrix `W` can be fitted with an online error check of the ABFT kind
(algorithm-based fault tolerance). The sum of all outputs, `sum(C)`, must equal
`(column sums of A) · W`, summed over the columns of W. This RTL builds that
check around a weight-stationary *sparse tensor array*, an array whose
processing elements take a block of four inputs per cycle and keep only the
non-zero weights of 2:4 or 1:4 structured-sparse `W`.

Two ideas make the check cheap, and both live entirely at the border of the
array:

1. **The array computes its own prediction.** The column sums of `A` are
   gathered while the rows stream in. They are then pushed through the array as
   one extra "checksum row". The stationary weights multiply them exactly as
   they multiply real rows, so the per-row sums of `W` are never needed. The
   non-zeros that shape the result also shape the prediction.
2. **The checksum row is sent digit by digit.** A column sum is 16 bits wide,
   but an array input is 8 bits wide. The sum is therefore cut into two signed
   8-bit digits, sent in two consecutive cycles. The far-end accumulator shifts
   each digit's result back into place. The array itself is not modified in any
   way.

The default configuration is an 8 × 32 array of tensor PEs (32 rows × 32
columns of `W` per tile). It uses 8-bit inputs and weights, 24-bit column sums,
16-bit input accumulators and 48-bit checksum accumulators.

## Block diagram

```
               w_in[c] (weight load, shifts down)
                  |        |               |
 a_data ──► input_skew ──► IC ──► TPE ──► TPE ──► ... ──► TPE     row 0
 (row of A)   (row r      IC ──► TPE ──► TPE ──► ... ──► TPE     row 1
              delayed      :       :       :               :
              r cycles)   IC ──► TPE ──► TPE ──► ... ──► TPE     row R-1
                                   |       |               |
                                   ├─► c_out[0] ├─► c_out[1]  ├─► c_out[C-1]
                              0 ─► OC ───────► OC ── ... ──► OC ──┬─► actual_acc ──┐
                                                                  └─► predicted_acc┴─► checksum_cmp
 abft_ctrl: row handshake, checksum-wave insertion, tag (valid/mode/check/fin)
 tag pipeline (R + C stages): steers the accumulators and the comparator
```

| module | role |
|---|---|
| `abft_pkg` | widths, the weight-slot struct, mode and sparsity enums, derived constants |
| `tpe` | tensor PE: two weight slots, two 4:1 muxes, two multipliers, 3-input adder |
| `sparse_tensor_array` | R × C grid of `tpe` |
| `ic` | per-row input-checksum block: 4 × 16-bit accumulators, 2:1 muxes, digit generator |
| `oc` | per-column output-checksum cell: 24-bit adder and register, chained eastward |
| `actual_acc` | 48-bit sum of the row sums of C |
| `predicted_acc` | 48-bit sum of the shifted digit results |
| `checksum_cmp` | compares the two after each checksum wave; sticky error flag |
| `abft_ctrl` | sequencer: inserts checksum waves, row handshake |
| `input_skew` | systolic input skew, one cycle per row |
| `abft_sta_top` | everything wired together |

## The tensor PE and the weight format

Structured N:M sparsity with M = 4 means that every column of `W`, cut into
blocks of four consecutive rows, holds at most N non-zeros per block: two for
2:4, one for 1:4. TPE `(r, c)` holds the non-zeros of rows `4r .. 4r+3` of
column `c`. Each weight slot is a `wslot_t`: an 8-bit signed value and a 2-bit
index naming which of the four rows it belongs to (the position of the set bit
in that block's bit mask).

Each cycle TPE row `r` receives elements `4r .. 4r+3` of one row of `A`. Each
slot's index drives a 4:1 multiplexer. Both selected inputs are multiplied by
their weights and added to the partial sum arriving from above. The input
block is registered and passed east; the sum is registered and passed south.
With `sparsity = SP_1_4` the second multiplexer output is forced to zero, which
leaves its multiplier idle. A block with fewer non-zeros than slots simply
stores a zero weight.

**Weight loading.** While `w_load` is high, every column is a shift register
from top to bottom. Load `R` cycles, pushing the weights of the *bottom* TPE row
first. The top asserts that `w_load` is never high while a tile is in flight.

## The checker

**IC (west edge, one per TPE row).** Four 16-bit accumulators add every
element that enters the row. All four must be summed, because which of them
the row's weights will select is not known in advance. The `mode` input steers
four 2:1 multiplexers: in normal mode the inputs pass straight through, in
checksum mode the IC drives the array with its checksum digits instead.

**OC (south edge, one per column).** OC `c` adds column `c`'s output to the
running sum coming from OC `c-1` and registers the result. Column `c` delivers
a given row of `C` exactly one cycle after column `c-1`, so the chain lines
itself up. The last OC produces the sum of one complete row of `C` per cycle.
During a checksum wave it produces one digit's column-sum-times-`W` total per
cycle.

**Accumulators and comparator (south-east).** A tag pipeline delivers each
wave's mode to the accumulators. In normal mode `actual_acc` adds the row sum.
In checksum mode `predicted_acc` adds the digit result, sign-extended to 48
bits and shifted left by 8 × (digit number). One cycle after the last digit of
a wave, both registers cover exactly the same rows of `A`. `checksum_cmp`
compares them there, pulses `chk_valid` (with `chk_err` if they differ) and
sets the sticky `err_flag`.

## Digit-serial checksum waves (the subtle part)

The TPE multipliers are signed 8 × 8. A 16-bit column sum `S` is therefore sent
as two *signed* digits, least significant first:

```
d0 = S[7:0] read as a signed byte              (-128 .. 127)
d1 = (S - d0) / 256   (exact, arithmetic shift)
S  = d0 + 256 · d1
```

The IC performs this on its own accumulator. Each checksum cycle outputs the
low byte and replaces the accumulator with `(acc - digit) >>> 8`. After the
last digit the accumulator holds zero, ready for the next batch, so no
separate clear is needed between waves.

The top digit must also fit in 8 signed bits, and that sets the batch length.
At most `T_ROWS = 2^16 / 2^8 = 256` rows may be summed before a wave is
injected. With 256 rows of 8-bit values, `S` lies in [-32768, 32512]. Then
`d1 = floor((S + 128) / 256)` lies in [-128, 127]: it always fits. The extreme
cases (256 rows of all -128 and of all +127) are among the tests.

The predicted checksum of one wave is therefore

```
P = Σ_k 2^(8k) · Σ_c Σ_j d_k[j] · W[j][c]  =  Σ_c Σ_j S[j] · W[j][c]  =  Σ_i Σ_c C[i][c]
```

where only stored (selected) weights take part, on both sides.

**Where the waves go.** `abft_ctrl` counts accepted rows. After the 256th row
since the last wave, and after the row flagged `a_last`, it drops `a_ready`
for `DIGITS = 2` cycles and sends the two digit cycles with a checksum tag.
The last digit carries `check`, and on the tile's final wave also `fin`. The
row stream is thus interrupted for 2 cycles every 256 rows, which costs under
1 % of throughput. `stall` is high during those interrupting waves. It stays
low for the final wave, which follows `a_last` and holds up no row. The skew
makes the switch to checksum mode happen one row later for each TPE row, as
for any row of `A`.

Cycle view of one wave (one TPE row, one input lane; `x` = a row of A):

```
cycle:      ...  t-1   t      t+1    t+2
a_ready      1    1    0      0      1
array in     x    x    d0     d1     x      (d0, d1 from the IC)
tag.check    0    0    0      1      0
```

## Timing

If row `i` is accepted at cycle `t`:

- `c_out[c]` carries `C[i][c]` at cycle `t + R + c`, flagged by `c_valid[c]`.
  Outputs leave skewed, one cycle later per column; no de-skew buffer is built.
- that row's sum reaches the accumulators at cycle `t + R + C`.
- if the last row is accepted at `t_last`, `done` (together with the final
  `chk_valid`) is high at `t_last + DIGITS + R + C + 1`. For 8 × 32 that is
  43 cycles after the last row.

`start` clears the IC accumulators, both checksum accumulators and
`err_flag`. `busy` stays high from `start` until `done`.

## Interface of `abft_sta_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `sparsity` | in | 1 | `SP_2_4` or `SP_1_4`; hold it for the whole tile |
| `w_load`, `w_in[C]` | in | 1, C × 2 × 10 | weight shift-in (only while `busy` is low) |
| `start` | in | 1 | begin a tile (accepted while idle) |
| `a_valid`, `a_ready`, `a_last` | in/out/in | 1 | row stream; `a_valid` must stay high until taken |
| `a_data[R]` | in | R × 4 × 8 | one row of A; `a_data[r]` = elements 4r..4r+3 |
| `c_out[C]`, `c_valid[C]` | out | C × 24, C | skewed results |
| `act_chk`, `pred_chk` | out | 48 | the two checksums |
| `chk_valid`, `chk_err` | out | 1 | one comparison per wave |
| `err_flag` | out | 1 | sticky mismatch of the current tile |
| `done` | out | 1 | last comparison of the tile |
| `busy`, `stall` | out | 1 | tile in flight; checksum wave interrupting the stream |

A matrix larger than one tile is handled by the surrounding system, which
loads one weight tile after the other and adds up partial results across
K-tiles. Each tile gets its own check.

## What the check sees and what it cannot

- **Partial-sum registers.** A flipped bit here reaches exactly one output
  and nothing else. It is always detected once it changes an output.
- **East-going input registers.** A flip in an input that the downstream
  weights do not select changes nothing and stays silent, which is correct.
  A flip in a selected input is detected.
- **Weight registers.** A weight that is wrong *from the first row on* is
  invisible. The prediction is made by the same weights, so actual and
  predicted agree. A weight that flips mid-tile is detected, because the rows
  before and after the flip saw different weights. This is inherent to letting
  the array predict its own checksum.
- **Checker registers.** A flip in the IC, the OC chain or the accumulators
  produces an alarm although `C` is correct (a false positive).
- **Width limits.** The OC adders are 24 bits wide. For an 8 × 32 array, an
  extreme input pattern (all products at +2^14) can wrap the chain sum. The
  actual and predicted sums then differ by a multiple of 2^24, which shows up
  as a false alarm. Larger arrays reach this limit sooner: 16 × 64 and
  32 × 128 can exceed 24 bits by 2 and 4 bits.

`tb/abft_fault_campaign_tb.sv` measures this statistically. It runs 400
campaigns on the 8 × 32 array with random weights and data, flips 1 or 1–5
bits at random cycles, and picks sites in proportion to their bit counts. Its
result with its fixed seed is as follows.

| faults per campaign | detected | silent (of which output wrong) | false positive | false negative |
|---|---|---|---|---|
| 1 (163 campaigns) | 49.7 % | 41.7 % (10 campaigns) | 8.0 % | 0.0 % |
| 1–5 (197 campaigns) | 86.3 % | 12.7 % (12 campaigns) | 0.0 % | 1.0 % |

With a single fault, most silent outcomes are flips of inputs that no weight
selects. The few silent runs with a wrong output are weight flips that happened
before the first row reached that PE. The false-positive share is higher than
the published ResNet50 study reports, which has 81 % / 96 % detection and
about 2.5 % false positives. Three differences explain this: these tiles are
short, only 16–64 rows, so an early weight flip is common; the data is
uniformly random; and the checker registers (IC, OC, accumulators) are a larger
share of all registers in a design without buffers. No false alarm occurs without faults,
and every partial-sum flip that corrupts an output is caught.

## Sizes and parameters

| name | default | where |
|---|---|---|
| `R`, `C` | 8, 32 | `abft_sta_top`, `sparse_tensor_array` |
| `DATA_W`, `PSUM_W`, `IC_W`, `CHK_W` | 8, 24, 16, 48 | `abft_pkg` |
| `BLK`, `NNZ` | 4, 2 | `abft_pkg` (N:M block and slots) |
| `DIGITS`, `T_ROWS` | 2, 256 | derived: `IC_W/DATA_W`, `2^(IC_W-DATA_W)` |

`R` and `C` can be changed freely; `tb/abft_sta_top_sizes_tb.sv` runs 16 × 64
and 32 × 128. The widths in `abft_pkg` are meant to stay consistent with one
another. `T_ROWS` must keep the last digit inside 8 bits, which holds for any
`IC_W = DATA_W · DIGITS`. Synthesised at 8 × 32, the design has about 21,100
flip-flop bits. Of these, 18,688 are in the array, 512 in the IC blocks, 768 in
the OC cells, 97 in the accumulators, and the rest in the skew and tag
pipelines.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and
finishes. For example:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
          -Irtl -Itb rtl/abft_pkg.sv tb/abft_sta_top_tb.sv \
          --top-module abft_sta_top_tb
./obj_dir/Vabft_sta_top_tb
```

`--timescale` is needed because only the testbenches carry a `timescale`
directive. `-Wno-fatal` keeps verilator going on its MULTIDRIVEN warnings.
These appear only in the fault-campaign and top testbenches, where `force`
writes to registers that are also written by `always_ff`.

| testbench | covers |
|---|---|
| `abft_sta_top_tb` | whole design at 8 × 32. Covers 2:4 and 1:4 tiles, bubbles, a 300-row tile with an interrupting wave, extreme-value 256-row tiles, a mid-tile weight bit flip that must be flagged, output values and cycles, and `done` latency. |
| `abft_layer_tb` | one convolution layer of ResNet50-like shape (56 × 56 × 64 input, 64 filters 1 × 1, i.e. a 3136 × 64 × 64 GEMM) as 2 × 2 weight tiles, at 2:4 and at 1:4. Each tile has 13 checksum waves. Partial results are summed over K and compared with a dense reference; every comparison must agree. |
| `abft_sta_top_sizes_tb` | 16 × 64 and 32 × 128, one 300-row tile each (helper `abft_size_harness`) |
| `abft_fault_campaign_tb` | fault-injection statistics (see above) |
| `tpe_tb`, `sparse_tensor_array_tb`, `ic_tb`, `oc_tb`, `actual_acc_tb`, `predicted_acc_tb`, `checksum_cmp_tb`, `abft_ctrl_tb`, `input_skew_tb` | each block against its own reference |

The testbenches generate all their data with `$urandom`. Uninitialised state
does not matter: every register is reset.

## Relation to the published design

The following follow the publication: the TPE structure, the IC structure
(accumulator and 2:1 mux per lane, `0: normal / 1: checksum`), the OC chain,
the two south-east accumulators driven by a shared mode, all widths (8/24/16/48
bits), the 256-row batch limit (2^16 / 2^8, IC width over data width), the
two digits per wave (16 / 8), the
least-significant-digit-first order and the 8 × 32 size.

These are this implementation's own choices:

- the signed-digit recoding in the IC. The publication says only that the
  checksum is cut into 8-bit digits and that the far-end accumulator handles
  shifting and sign extension.
- the weight-slot format (value plus 2-bit index) and the shift-chain weight
  loading.
- the valid/ready row interface, the controller's state machine and the
  side-band tag pipeline that times the accumulators.
- counting *rows* (not cycles) towards the 256-row limit. Idle cycles add
  nothing to the input sums.
- comparing after every wave, with a sticky flag, instead of only at the end.
- reset and clear behaviour, and the skewed, un-buffered column outputs.

The input, weight and output memories that would surround the array are not
included. The ports above take their place.
