# PALUTE in SystemVerilog: lookup-table GEMM inside M3D DRAM

With 4-bit weights, a dot product over a pair of activations `(x1, x2)` can take only a few
hundred values, one for each weight pair `(w1, w2)`. So the multiply-accumulate can be replaced
by a table: compute `w1*x1 + w2*x2` once for every possible weight pair, store the table in
DRAM, and then use each stored weight pair as a row address. PALUTE places these tables inside a
monolithic-3D (M3D) DRAM whose memory arrays (MATs) stand vertically. Every MAT has a small row
decoder that looks up many tables at once. A logic die under the DRAM builds the tables on the
fly and runs the schedule. A bank-level accumulator adds up the looked-up partial sums.

This RTL implements that design as described in the PALUTE paper (an edge-LLM accelerator for
W4A4 Qwen3 models). It covers the in-DRAM query logic of a MAT, the bank, the channel, the LUT
generators (GEMM core and element-wise unary core) and a system controller, all connected into
one chip. Where the paper gives only a block's function, this design fills in the detail. Those
choices are listed in [Departures and choices](#departures-and-choices).

## Organisation

```
palute_top                      chip: CH_ROWS x CH_COLS channels + system controller
 ├─ palute_ctrl                 host command port, unicast / broadcast to banks
 └─ palute_channel  (x16)       BANK_ROWS x BANK_COLS banks, one LUT generator per bank
     ├─ lut_generator (x16)     logic die: FSM controller + two cores
     │   ├─ gemm_lut_core       half-table w1*x1 + w2*x2 in three cycles
     │   └─ unary_lut_core      16-entry GELU / ReLU table
     └─ palute_bank   (x16)     MATS MATs + bank accumulator + bank sequencer
         ├─ lut_mat  (xMATS)    768 x 1024 cell array with sweep/match query logic
         └─ bank_accumulator    one 32-bit register per output lane
```

| parameter | default | paper | meaning |
|---|---|---|---|
| `CH_ROWS x CH_COLS` | 4 x 4 | 4 x 4 | channels per chip |
| `BANK_ROWS x BANK_COLS` | 4 x 4 | 4 x 4 | banks per channel |
| `MATS` | 1024 (bank, channel), **128 (top)** | 1024 | MATs per bank |
| `ROWS x COLS` | 768 x 1024 | 768 x 1024 | cells per MAT (rows = word lines) |
| `BW_BUF` | 128 | 128 bit/cycle | row-buffer interface per MAT |
| `VALUE_W` | 8 | 4 | bits per stored table word |
| `ACC_W` | 32 | – | accumulator width |

Derived sizes: one row holds `GROUPS = COLS/VALUE_W = 128` words. A result burst carries
`LANES = BW_BUF/VALUE_W = 16` words per beat, so a burst has `BEATS = 8` beats.

The chip-level default of 128 MATs per bank is a size limit, not a design change. The paper's
chip has 262,144 MATs. A lint or elaboration run that expands every MAT instance needs about
120 MB per MAT per bank at this level, so the paper's 1024 would need about 120 GB. The bank
and channel modules keep 1024. Set `MATS = 1024` on the top to get the paper's chip.

## The half-table, the central trick

Weights are 4-bit two's complement, `w in [-8, 7]`. The full table for one activation pair
would have 256 entries. Since `(-w1)*x1 + (-w2)*x2 = -(w1*x1 + w2*x2)`, only pairs with a
non-negative `w1` are stored:

* **Fold on the way in.** If `w1 < 0`, the pair `(w1, w2)` becomes `(w1c, w2c) = (-w1, -w2)`
  and its sign is remembered. The folded `w1c` lies in 0..8. `w2c` lies in -8..8, because
  folding can turn `w2 = -8` into `+8`.
* **Look up** row offset `w1c*17 + (w2c + 8)`. This makes 9 x 17 = 153 rows instead of 256.
* **Unfold on the way out.** The result is negated if the pair was folded. Results widen to
  `VALUE_W+1 = 9` bits.

Example: `(w1, w2) = (-8, 7)` folds to `(8, -7)`, row `8*17 + 1 = 137`, which holds
`8*x1 - 7*x2`. The MAT returns `-(8*x1 - 7*x2)`.

A table word must hold every `w1c*x1 + w2c*x2`. With INT4 activations this spans -128..120,
which needs 8 bits. The paper assumes 4-bit table words (32 per 128-bit beat). That width cannot
hold GEMM partial sums exactly, so this design uses 8 bits (16 per beat).

Unary tables (GELU, ReLU) are not folded. They keep all 16 entries, row offset `x + 8`.

## How a MAT answers a query (`lut_mat`)

A MAT row is divided into 128 column groups of 8 cells. In a LUT region, each row is one table
index and each group holds one table. That can be a copy of the same table, or a different
table for each group. A query runs in three phases:

1. **Load (1 cycle).** Each group reads its own index from the index row `q_idx_row`. In GEMM
   mode this is the weight pair (`[7:4] = w1`, `[3:0] = w2`). In unary mode it is `x`
   (`[3:0]`). The input sign-flip folds the pair and stores the target row offset and the sign
   per group.
2. **Sweep (153 or 16 cycles).** The decoder activates LUT rows `q_lut_base + 0, 1, 2, ...`,
   one per cycle. Each group whose target equals the current offset latches that row's word
   into its flip-flops. One sweep serves all 128 groups, however scattered their indices are.
3. **Out (8 beats).** The flip-flops go through a MUX 16 words at a time. The output sign-flip
   negates the words of folded groups. `res_valid`/`res_ready` form the handshake, and
   `res_beat` and `res_last` mark the beats.

The first beat is valid `1 + 153` clock edges after `q_start` in GEMM mode (`1 + 16` in unary
mode). The same array also serves plain row writes (per-group mask) and row reads. The bank uses
these for weights, LUT write-back and the KV cache. Row writes during a query are flagged by an
assertion.

## Building the tables

**GEMM core (`gemm_lut_core`).** This follows the paper's three-cycle structure. An operand
register, fed by a MUX and a sign inverter, holds `x1`, then `x2`, then `-x2`. The
"MegaMultiplier" forms `k * operand` for k = 1..8 in parallel. In cycle 1 the products `k*x1`
are buffered. In cycles 2 and 3, nine adder rows (one per `w1c = 0..8`) add their buffered
`w1c*x1` to every `±k*x2`. The `w2c = 0` entries are the buffered products themselves. `done`
rises three clock edges after `start`, and the whole 153-entry table is then ready.

**Unary core (`unary_lut_core`).** The core computes all 16 entries in one cycle. An INT4 code
`x` stands for the real value `v = x*s/16`, where `s` is an unsigned Q4.4 scale. The output
uses the same scale, so GELU becomes `y = round(x * Phi(v))`. That always fits in [-8, 7].
`Phi` is a piecewise-linear fit through `Phi(0), Phi(0.5), ..., Phi(3)` in 1/256 units, and 1
beyond. ReLU is exact.

**Generator unit (`lut_generator`).** The unit's FSM starts one of the two cores. It then writes
the table into the addressed MAT (or all MATs of the bank), one row per cycle. Each write
carries one 8-bit entry, which the bank copies into all 128 column groups. That copying is the
horizontal LUT replication. From `start` to `done`, GEMM takes 157 cycles (3 build, 1
hand-off, 153 rows) and unary takes 17.

## Running a GEMM on the chip

The host drives `palute_top` through one command port: `host_valid`/`host_ready`, a `cmd_t`
word and a 1024-bit `host_data`. `host_done` pulses when the command has finished in every bank
it targets. A command addresses one bank (`chan`, `bank`), or all banks with `bcast`.

| op | effect |
|---|---|
| `OP_WRITE_ROW` | `host_data` into row `row` of MAT `mat` (weights, indices, KV cache) |
| `OP_READ_ROW` | row back on `host_rsp_data` (KV-cache read) |
| `OP_GEN_GEMM` | generator builds the half-table of `(x1, x2)` into rows `row..row+152` of MAT `mat` (or `all_mats`) |
| `OP_GEN_UNARY` | generator builds the `func`/`scale` table into rows `row..row+15` |
| `OP_QUERY` | every selected MAT looks up the indices in row `row` against the LUT at `lut_base` in `mode`; results go to the accumulator, added if `accumulate` |
| `OP_READ_ACC` | accumulator lane `lane`, sign-extended, on `host_rsp_data` |
| `OP_CLEAR_ACC` | zero the bank's accumulator |

Take a dot product of length `2*MATS` per bank and 128 output columns. MAT `k` holds the table
of activation segment `k`, `(x[2k], x[2k+1])`. Its weight row holds, in group `j`, the weight
pair of segment `k` for output column `j`. One broadcast `OP_QUERY` makes every MAT of every bank
sweep in parallel. The bank then drains its MATs one after another into the accumulator, so
lane `j` ends with `sum_k (w1[k][j]*x[2k] + w2[k][j]*x[2k+1])`. Longer dot products use more
weight rows and further accumulating queries. The paper keeps weights low in the MAT (close to
the logic die), LUTs in the middle rows and the KV cache in the high rows. Here that tiering is
set by the row numbers the host uses; the RTL does not enforce it.

Bank query time, from acceptance to `done`: `2 + 153 + n_mats * 8` cycles. The sweep runs in
parallel; draining the MATs into one accumulator is serial.

## Departures and choices

The following are this design's choices where the paper says nothing, or says something else:

* **Table word width** is 8 bits, not 4 (see above).
* **Weight encoding** is two's complement. The paper's half-table figure prints `-8` as `1111`,
  which fits no standard encoding. The paper's text lists the generator's magnitudes as
  `|w1| in 1..8, |w2| in 1..7`, while its figures show `8*x2` and `8*x1 - 8*x2`. The core builds
  magnitudes 1..8 for both signs of `w2`, and also the zero-weight entries, so that every folded
  pair finds its row.
* **The sweep** covers only the LUT rows (153 or 16), one row per cycle. The paper says the
  decoder sweeps "all rows".
* **Accumulator** is 32 bits, one beat per cycle, with an overwrite mode for unary results.
* **Generator placement.** The paper says both "one LUT-generation unit per channel" and "a 4x4
  array of units, each serving one bank". This design has one unit per bank.
* **Command set, handshakes, the broadcast controller and reset behaviour** are this design's
  own. The paper names the controller and the five-step schedule but gives no detail.
* **DRAM timing** is not modelled: no refresh, and no tACT, tPRE, tRD or tWR (14.16 ns each in
  the paper). A row access takes one clock. The cells and sense amplifiers are modelled only as
  storage.
* **Not built:** the hybrid-bonding link (plain wires here), and blocks the paper only names:
  the nonlinear reduction core (softmax, layer norm), the element-wise binary core, the on-chip
  SRAM and the vector-wise core. Without a reduction core, softmax and layer norm have to run
  off-chip.

## Capacity against the evaluated models

At the chip default (128 MATs per bank), 615 non-LUT rows per MAT give about 2.6 GB for weights
and KV cache together. At the paper's 1024 MATs per bank this is 20.6 GB. With 4-bit weights,
Qwen3-0.6B, -1.7B and -4B fit at the default. Qwen3-8B (about 4.1 GB) needs the paper's
`MATS = 1024`. Beside Qwen3-4B's weights, the default chip has room for about 1.5 x 10^4 tokens of 4-bit KV
cache (36.9 KB per token, from Qwen3-4B's layer sizes). So the longer points of the paper's
token-length sweep need the full 1024 MATs per bank. At 10^6 tokens even the paper's 24 GB
is not enough.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_gemm_lut_core` | all 256 activation pairs x 153 entries, three-cycle latency |
| `tb_unary_lut_core` | ReLU exactly; GELU against a numerically integrated `Phi`, within one code, over 52 scales |
| `tb_lut_mat` | GEMM queries with per-group tables and indices (including folded pairs), unary query, back-pressure, 154-cycle latency, masked writes, reads |
| `tb_lut_generator` | written rows against computed tables, row addresses, 157/17-cycle timing |
| `tb_bank_accumulator` | random accumulate/overwrite/clear against a model |
| `tb_palute_bank` | 4-MAT dot products, accumulation over queries, single-MAT overwrite, unary mode, KV row, query latency |
| `tb_palute_channel` | two banks with their own generators querying in parallel, ReLU path |
| `tb_palute_ctrl` | unicast/broadcast dispatch against random-latency bank models |
| `tb_palute_top` | end to end at 2 channels x 2 banks x 2 MATs: broadcast generation, weight loading, two accumulating GEMM queries, GELU, KV cache; counts each mechanism |

The testbenches run at reduced sizes; none runs the chip at its default parameters. The largest
simulated configuration is the top with 2 channels x 2 banks x 2 MATs of 256 x 128 cells. The
default chip holds about 3 GB of cell state (24 GB at the paper's size), too much to simulate. To run one testbench with Verilator:

```
verilator --binary --timing --assert rtl/palute_pkg.sv rtl/*.sv tb/tb_palute_top.sv \
          --top-module tb_palute_top -Mdir obj && obj/Vtb_palute_top
```

The test stimulus is random (`$urandom`), and the GELU checks compute their reference in
`real` arithmetic.
