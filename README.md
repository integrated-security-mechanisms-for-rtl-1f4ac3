# Secured memristive crossbar: keyed row permutation and watermark columns

A memristive crossbar stores a neural network's weights as cell conductances
and multiplies an input vector by them in one analog step: every row carries
an input voltage, every cell passes a current proportional to its
conductance, and each column sums its cells' currents. The weights therefore
sit in plain sight in a non-volatile array. Anyone who gets the chip can
read the cells, or probe the periphery, and clone a model that cost a great
deal to train.

This design adds two cheap mechanisms to such an array:

* **Keyed permutor.** A secret key scrambles which physical row each input
  line drives. The weights of input *i* are stored in row pi(i), and pi is
  known only to whoever holds the key. Without the key, the rows of the
  extracted array cannot be matched to the network's inputs.
* **Watermark protection columns.** Two extra columns hold a fixed, secret
  conductance pattern instead of weights. For any input vector their current
  is predictable, and a checker compares the measured current with that
  prediction on every inference. A match proves the array is the owner's.
  A mismatch shows that the watermark cells were altered.

The array itself is analog. This RTL models it with integer codes: voltages
are 8-bit input codes, conductances are 4-bit level codes, and currents are
exact integer sums. The permutor and the watermark checker are ordinary
synthesizable logic. The array is a behavioural model.

## Block diagram

```
 in_v[0..255] ──► keyed_permutor ──► row register ──► memristor_crossbar ──► out_i[0..127]
 (input codes)     ▲ key register      (stage 1)      256 rows x 130 cols    (stage 2 registers)
                   │                                   cols 0..127: weights
  key_in/key_load ─┘                                   cols 128,129: watermark ──► out_wm_i[0..1]
                                                               │
                                row register ──► watermark_checker ──► wm_detected / wm_alarm
```

| File | Module | What it is |
|---|---|---|
| `rtl/xbar_pkg.sv` | package | default sizes, triplet orderings, triplet grouping, watermark pattern function |
| `rtl/keyed_permutor.sv` | `keyed_permutor` | key register and triplet-swap routing of input lines to rows |
| `rtl/memristor_crossbar.sv` | `memristor_crossbar` | behavioural model of the 1T1R array with its two watermark columns |
| `rtl/watermark_checker.sv` | `watermark_checker` | expected-signature computation and comparison ("watermark detected") |
| `rtl/secure_crossbar_top.sv` | `secure_crossbar_top` | the whole datapath with its two register stages |

## The keyed permutor: triplet swaps

A full permutation of 256 rows would need a 256-input crossbar switch and a
1684-bit key. Instead, the rows are split into `T = floor(ROWS/3)` disjoint
**triplets**. Each triplet is reordered independently by one of its
3! = 6 orderings. So the hardware is `T` small 3x3 switches, and the key is
one 3-bit field per triplet:

* key field `t` = `key[3t+2 : 3t]` selects the ordering of triplet `t`;
* the key has `KEY_BITS = 3T` bits: 255 bits for 256 rows, 126 bits for
  128 rows;
* the number of distinct permutations is `6^T`. That is 2^108.6 for 128
  rows, and 2^219.7 for the default 256 rows.

Triplet `t` is made of the rows `t`, `t+T` and `t+2T`. Rows that are far
apart share a triplet, so an input can land far from its natural row. For
example, with 256 rows input 1 drives row 1, 86 or 171. Rows from `3T` up
(row 255 at the default size) are in no triplet and are never moved.

The ordering selected by a field value `c` sends member `p` of the triplet
(row `t + p*T`) to member `perm_dest(c, p)`:

| code | member 0 → | member 1 → | member 2 → |
|---|---|---|---|
| 0 | 0 | 1 | 2 (identity) |
| 1 | 0 | 2 | 1 |
| 2 | 1 | 0 | 2 |
| 3 | 1 | 2 | 0 |
| 4 | 2 | 0 | 1 |
| 5 | 2 | 1 | 0 |

Codes 6 and 7 are not orderings. A key that contains either is **rejected**:
`key_err` pulses for one cycle and the previous key stays in force. The key
can be replaced at any time with `key_load`, and the new key takes effect
from the next cycle. After reset no key is held: `key_valid` is low, every
row is held at zero, and the top level accepts no input vectors.

**What the key owner must do.** The programming port addresses physical
rows. To store the logical weight `W[i][j]`, write it to physical row
`pi(i)` of the key in use, where `pi(i)` for `i < 3T` is

```
t = i mod T,  p = i div T,  pi(i) = t + T * perm_dest(key[3t+2:3t], p)
```

and `pi(i) = i` otherwise. If the key is changed without reprogramming, the
array computes with scrambled rows. The outputs are then wrong, but the
watermark check still passes, because it works on physical rows.

## The watermark columns and their check

The array has `COLS + 2` physical columns. The two watermark columns are at
`WM_COL0` and `WM_COL1`, which are by default the last two (128 and 129).
Both are parameters, so the watermark columns can be placed at the start or
spread out. The watermark columns share the rows with the weight columns, so
under any input they draw current like a weight column.

Their contents are a fixed pattern `P[r][w]` (4-bit conductance codes), set
by the `provision` pulse. This pulse stands for factory initialisation: it
also clears all weight cells. The pattern is not stored in a table. It is a
32-bit integer hash of the row, the column and a seed `WM_SEED`:

```
h = seed ^ (r * 0x9E3779B1) ^ (w * 0x85EBCA6B)
h = h ^ (h >> 15);  h = h * 0x2C1B3C6D;  h = h ^ (h >> 12)
P[r][w] = h[CELL_BITS-1:0]
```

For each vector, the checker computes the expected watermark currents
`E_w = sum_r row_v[r] * P[r][w]` from the row voltages actually applied,
which are the permuted ones. It compares each with the measured current of
its column. A column matches when the two differ by at most `TOL`. The
default `TOL` is 0, because the model is exact; a real array would need a
window that covers its noise. `wm_detected` needs both columns to match.
`wm_alarm` flags a result whose check failed, and `wm_col_match` shows which
column still matches.

Reprogramming one watermark cell changes its column's current by the cell's
row voltage times the code change. The check catches this whenever that
product exceeds `TOL`, which means on every vector that drives the row. Changes
to several cells can cancel on a given vector, but not on all vectors. An
all-zero input vector checks nothing.

## Timing and interface of `secure_crossbar_top`

Two register stages, one vector per clock:

1. At the clock edge where `in_valid && in_ready`, the permuted row vector is
   registered. A key change after this edge does not affect the vector.
2. At the next edge, the column currents and the watermark verdict are
   registered, and `out_valid` is high for one cycle per vector.

`in_ready` equals `key_valid`. Cell writes (`prog_en`, one cell per cycle)
and `provision` may happen at any time. A vector in stage 1 sees the cells as
they are at the edge that ends stage 1.

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `key_load`, `key_in` | in | 1, 255 | load a new key |
| `key_valid`, `key_err` | out | 1, 1 | key held; last load rejected |
| `provision` | in | 1 | clear weights, write the watermark pattern |
| `prog_en`, `prog_row`, `prog_col`, `prog_g` | in | 1, 8, 8, 4 | write one cell (physical address, watermark columns included) |
| `in_valid`, `in_ready`, `in_v` | in/out/in | 1, 1, 256x8 | input vector |
| `out_valid`, `out_i` | out | 1, 128x21 | weight column currents |
| `out_wm_i` | out | 2x21 | watermark column currents |
| `wm_detected`, `wm_col_match`, `wm_alarm` | out | 1, 2, 1 | watermark verdict |

Parameters, with defaults: `ROWS = 256`, `COLS = 128`, `IN_BITS = 8`,
`CELL_BITS = 4`, `WM_COL0 = COLS`, `WM_COL1 = COLS + 1`, `WM_SEED`, `TOL = 0`.
The current width is `IN_BITS + CELL_BITS + clog2(ROWS+1)` = 21 bits, which
is enough for full-scale codes on every row.

## Sizes the design was checked at

The default 256 x 128 array is the largest size at which these mechanisms
were evaluated.
The smaller arrays, 128 x 10 and 10 x 10, fit in a corner of it: the unused
inputs are held at zero and the unused columns are left unread. MNIST images
(28 x 28 = 784 pixels) and RF samples must be down-sampled to at most 256
values before they reach the array; that is done in software. The
testbench `crossbar_workloads_tb` runs all three sizes on the default design.

## How far this follows the original design, and where it departs

Taken from the original description:
* the input → keyed permutor → crossbar → columns chain;
* key-controlled remapping of inputs to rows, built from triplet swaps;
* a key space of about 2^109 at 128 rows, which the triplet reading above
  reproduces;
* two watermark columns that hold no weights, sit at the array's end by
  default and can be moved;
* a fixed watermark pattern verified through its current signature during
  normal inference;
* the 256 x 128 array size.

This design's own choices, which the description leaves open:
* all digital widths and codes;
* the grouping of rows into triplets and the code table;
* rejecting invalid key codes, and blocking inference until a key is loaded;
* the key register itself. The description asks that keys be stored
  securely and updated periodically. Here the key is a plain register; secure
  storage (fuses, PUF, encrypted load) is not modelled;
* the watermark pattern function, and the digital computation of the
  expected signature with a tolerance window;
* the programming and provisioning ports, and the two-stage pipeline.

Not modelled:
* the analog behaviour of the array: wire parasitics, the access transistor
  of each 1T1R cell, device non-linearity and variation;
* the input voltage drivers and the column current sensing. The model hands
  currents over as exact integers;
* the "dummy activity" that would make the watermark columns look busy like
  the weight columns. Here they only see the shared row voltages;
* the power, delay, current and transistor-count overheads. These are
  circuit-simulation results and cannot be reproduced from RTL.

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Build any of them with Verilator 5, for
example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/xbar_pkg.sv tb/secure_crossbar_top_tb.sv --top-module secure_crossbar_top_tb -o sim
./obj_dir/sim
```

| Testbench | Scope |
|---|---|
| `keyed_permutor_tb` | 128 rows: key rejection, no-key blanking, random keys against a reference, key update timing, identity key, key width of 126 bits |
| `memristor_crossbar_tb` | 12 x 5 array with watermark columns at 1 and 6: provisioning, programming, MVM against a reference, full-scale codes |
| `watermark_checker_tb` | 16 rows, `TOL = 2`: exact and near matches, per-column failures, tampered cells |
| `secure_crossbar_top_tb` | full size, 256 x 128: blocked without key, key rejection, programming through the key, streamed vectors with latency and throughput checks, key update, watermark tampering and re-provisioning; each mechanism must occur |
| `crossbar_workloads_tb` | full size: the 10 x 10, 128 x 10 and 256 x 128 arrays as workloads |
| `wm_placement_tb` | 9 x 6 array with the watermark columns moved to physical columns 0 and 4: column mapping, watermark currents, tamper alarm |

The full-size testbenches build in about 10 s and run in under 20 s. The
reference models in the testbenches keep their own copies of the ordering
table and the pattern hash. They do not call the package.
