# Positive/negative approximate MAC array

An 8-bit multiplier saves energy if it does not generate its lowest partial
products. But a multiplier that only drops bits always errs in the same
direction, and in a convolution those errors add up. This design gives every
multiplier two approximate modes with opposite error signs:

* **PE (positive error).** The `z` least partial products are *perforated*
  (set to zero). The result is too small.
* **NE (negative error).** The same partial products are *forced on*. The
  result is too large.

A third mode, **ZE (zero error)**, is the exact product. The mode and `z`
(1, 2 or 3) are chosen per weight, offline, and stored next to the weight
(3 bits). Inside one filter, half the occurrences of a weight value go to PE
and half go to NE, so their mean errors cancel in the filter's sum. The
approximated partial products are the same every cycle while the weight stays
in place, which cuts switching activity.

The RTL here is an array of such multipliers. It is a weight-stationary
systolic array (TPU style) of 64 × 64 MAC units, with a weight buffer that
holds the mode bits, a bias buffer and a small command controller. All of it
is synthesizable SystemVerilog-2017.

## 1. The three modes

Let `A` be the 8-bit activation, `W` the 8-bit weight (both unsigned,
0..255), and `r = A mod 2^z` the value of the `z` low activation bits.

| mode | code `{ne, z}` | product | error `W·A − product` |
|------|----------------|---------|-----------------------|
| ZE   | `{x, 0}`       | `W·A` | 0 |
| PE   | `{0, z}`, z=1..3 | `W·(A − r)` (low bits of A cleared) | `+W·r`, never negative |
| NE   | `{1, z}`, z=1..3 | `W·(A + 2^z−1 − r)` (low bits of A set) | `−W·(2^z−1−r)`, never positive |

Over uniformly distributed activations, the mean error is `s·(2^z−1)/2·W`,
with `s = +1` for PE and `−1` for NE. The variance is `W²·(4^z−1)/12` in both
modes. (The source publication prints this variance with a factor `W`, not
`W²`. The exhaustive and statistical testbenches confirm `W²`.) The mode code
is `pn_pkg::pn_mode_t`. Its bit layout is this design's choice; only the
3-bit budget comes from the source.

## 2. Partial-product generation (`pn_ppgen`, `pn_mult`)

Row `n` of the multiplier is normally `A[n] ? W<<n : 0`. For the rows that
can be approximated, a 2:1 multiplexer picks between `0` and `W<<n`. Its
select is

    sel = ZE'·NE + ZE·A[n]

* `ZE = 1`: exact row.
* `ZE = 0, NE = 1`: row forced on.
* `ZE = 0, NE = 0`: row perforated.

`pn_mult` decodes the mode code into these per-row controls. Row `n` gets
`ZE = (n >= z)`, and every approximated row gets the same `NE = ne`. Only
rows 0..2 (`Z_MAX = 3`) carry the multiplexer. The higher rows are plain AND
rows, because `z` never exceeds 3. The eight rows are added with a plain `+`
and the adder structure is left to synthesis. The multiplier the source
builds on is a library exact multiplier whose internal structure is not
given, so its gate-level structure, and hence its energy figures, are not
reproduced here.

Both modules are purely combinational.

## 3. Why balancing works, and how the testbench shows it

The error of one output, `G = B + Σ W_i·A_i`, is the sum of the per-product
errors. The activations' low bits are independent of each other, so:

* mean error of `G` = `Σ s_i·(2^z_i−1)/2·W_i`
* variance of `G` = `Σ W_i²·(4^z_i−1)/12`

The mean depends only on the weights and their modes, both known before
inference. Take a value that occurs `m` times in a filter. Put `⌊m/2⌋`
occurrences in PE and `⌊m/2⌋` in NE with the same `z`, and their mean errors
cancel exactly. An odd occurrence is left exact and goes on the filter's
*residue list*. The residues can later be split into two sets of nearly equal
sum, one PE and one NE, for example by the largest differencing method
(Karmarkar–Karp). What remains is the variance, which grows about 4× per
step of `z`. The offline mapping therefore chooses `z` per layer.

`tb/tb_pn_balance.sv` demonstrates this on the hardware. The slice has 64
inputs and 16 filters. Weights are bell-shaped in 96..160 and activations are
uniform. Three tiles hold the same weights:

| tile | mode assignment | measured mean \|error\| per filter |
|------|-----------------|-----------------------------------:|
| 0 | all PE, z=3 | ≈ 28,400 |
| 1 | per-filter PE/NE pairs, z=3, residues exact | ≈ 210 |
| 2 | as 1, residues split by LDM into PE/NE, z=1 | ≈ 120 |

For each filter, the testbench also checks two things: the measured mean
matches the formula within 5 standard errors, and the measured variance
matches `Σ W²(4^z−1)/12` within ±40 %. The errors are the random part and
vary a little with the simulator seed.

The offline mapping flow is not hardware and is not included. It searches
layer by layer for the largest `z` each layer tolerates under an accuracy
budget, then handles the residues. Its only output is the 3-bit mode stored
with each weight.

## 4. The systolic array (`pn_pe`, `pn_skew`, `pn_array`)

PE `(r, c)` holds `W[r][c]` and its mode. Activation element `r` enters row
`r` from the left and moves one PE to the right per cycle. Partial sums move
one PE down per cycle. The top of column `c` is fed with the bias `B[c]`, so
the bottom of column `c` delivers `B[c] + Σ_r W[r][c]·A[r]`.

Timing, for a vector presented in cycle `t`:

    input skew        row r receives A[r] in cycle t + r
    PE (r, c)         multiplies in cycle t + r + c
    bottom of col c   sum valid in cycle t + ROWS + c
    de-skew + reg     whole vector on out_res in cycle t + ROWS + COLS

The latency is `ROWS + COLS` cycles (128 at the default size). A new vector
may enter every cycle. A cycle without `in_valid` is a bubble: its wavefront
still passes through, but is marked invalid and dropped. A valid bit runs
alongside the data in a shift register.

Weights are written one row per cycle (`wl_en`, `wl_row`, `wl_data`). They
must not change while vectors are in flight. Registers are reset
asynchronously (`rst_n`, active low).

## 5. Buffers, controller and the host protocol (`pn_buffer`, `pn_ctrl`, `pn_top`)

`pn_top` adds three parts around the array:

* **Weight buffer.** `TILES × ROWS` words. Each word is one array row: `COLS`
  entries of `pn_wentry_t = {mode[2:0], w[7:0]}`, 11 bits each. Word address
  = `tile·ROWS + row`.
* **Bias buffer.** `TILES` words of `COLS × 32` bits.
* **Controller.** States IDLE → LOAD → STREAM → DRAIN.

Host sequence:

1. Write the weight rows (`wb_we/wb_addr/wb_wdata`) and the tile's bias word
   (`bb_we/bb_addr/bb_wdata`). Writes may happen at any time, but not to the
   tile in use.
2. Issue a command with `cmd_valid`, `cmd_tile` and `cmd_count` while
   `cmd_ready` is high.
3. LOAD takes `ROWS + 1` cycles. The buffers have one cycle of read latency,
   so each row is written into the array one cycle after it is read. The bias
   word is captured in the second cycle.
4. In STREAM, `act_ready` is high. Each cycle with `act_valid && act_ready`
   passes one 64-byte activation vector into the array. The host may pause
   at any time.
5. Each result appears on `res_data` with `res_valid` exactly `ROWS + COLS`
   cycles after its vector was accepted, in order. The result stream cannot
   be stalled.
6. `done` pulses in the cycle the last result is valid, and the controller
   returns to IDLE. A command with `cmd_count = 0` only loads the tile.

To run a layer with `k` inputs per filter and `f` filters:

* Split it into tiles of 64 inputs × 64 filters, padding with zero weights in
  ZE mode.
* For each tile, stream the layer's im2col activation vectors.
* Add the partial results of the `⌈k/64⌉` input tiles on the host side.
  Put the real bias in only one of them.

The array does not accumulate across tiles. The 32-bit accumulator holds
`k·255·255` for `k` up to about 66,000. The network sizes evaluated in the
source (ResNet-20/32/44/56, MobileNetV2, GoogLeNet and ShuffleNet on CIFAR,
GTSRB and LISA) all run this way, tile by tile. None fits on chip at once:
the buffer holds 32,768 weights.

Assertions check two rules: a command's tile must exist (`pn_ctrl`), and a
weight row address must be in range (`pn_array`).

## 6. Parameters

| parameter | default | where | origin |
|-----------|---------|-------|--------|
| `DATA_W` | 8 | `pn_pkg` | source: 8-bit quantization, 0..255 |
| `Z_MAX` | 3 | `pn_pkg` | source: z ∈ {1, 2, 3} |
| 3-bit mode per weight | `{ne, z}` | `pn_pkg` | 3 bits from the source, layout chosen here |
| `ROWS × COLS` | 64 × 64 | `pn_top`, `pn_array` | chosen; 4K MACs, the size of an Edge-TPU-class array |
| `TILES` | 8 | `pn_top` | chosen |
| `ACC_W` | 32 | `pn_top`, `pn_pe` | chosen |
| `CNT_W` | 16 | `pn_top`, `pn_ctrl` | chosen: up to 65,535 vectors per command |

## 7. What follows the source and what does not

Taken from the source:

* the three modes and their arithmetic;
* the partial-product multiplexer and its select equation;
* the range of `z`;
* 3 mode bits stored with each weight;
* 8-bit unsigned operands;
* a TPU-like weight-stationary systolic array with the exact multipliers
  replaced.

Chosen here:

* the array size;
* register placement, skew logic and bias injection;
* the 32-bit accumulator;
* buffer sizes and ports;
* the command interface and handshakes;
* the mode-code layout;
* the plain-`+` summation of partial products.

Not included:

* the offline mapping algorithm and the quantization (software);
* the host and off-chip memory (the top's ports stand for them);
* the source's energy figures, which come from a 14 nm gate-level flow
  (roughly 5–37 % per multiplication depending on mode and `z`).

## 8. Simulation

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/pn_pkg.sv tb/tb_pn_top.sv --top-module tb_pn_top
    ./obj_dir/Vtb_pn_top

| testbench | what it checks |
|-----------|----------------|
| `tb_pn_ppgen` | multiplexer, exhaustive, at four shift positions |
| `tb_pn_mult` | all 65,536 operand pairs in all 7 modes; error signs; exact mean error per weight |
| `tb_pn_pe` | weight/mode capture, forwarding, one-cycle MAC |
| `tb_pn_skew` | per-lane delays of skew and de-skew |
| `tb_pn_array` | 4×3 array with random modes and bubbles: results, order, latency `ROWS+COLS`, weight reload |
| `tb_pn_buffer` | read latency, hold, write during read |
| `tb_pn_ctrl` | address sequence, LOAD length, handshake, `done` timing, zero-count command |
| `tb_pn_top` | end to end at 8×5×3 tiles: every mode, stream pauses, tile switches, a tile rewritten, a zero-count command |
| `tb_pn_top_full` | the same at the default 64×64, 8 tiles (about 3 minutes to build, under a second to run) |
| `tb_pn_balance` | the error-balancing workload of section 3 |

The testbenches use `$urandom`, and each has a cycle watchdog. The simulator
has two states, so all state read by the logic is reset or written before
use. The buffers' contents are not reset.

Two lint notes stand. Verilator reports `rst_n` as used both synchronously
and asynchronously; the synchronous use is only the `disable iff` of the
assertions. It also reports the package constants that some modules do not
use.
