# ViTCoD attention engine in SystemVerilog

Vision transformers see a fixed number of tokens (197 for a 224x224 image cut
into 16x16 patches, plus the class token). Because of that, their attention
maps can be pruned once, offline, to a fixed mask that is 80-95 % zeros. After
the columns are reordered, each mask has two parts:

- a few **global-token columns** that are almost dense;
- a **remainder** that is very sparse and concentrated near the diagonal.

The accelerator described here exploits that split with two engines that work
in parallel:

- a **denser engine** handles the global columns with plain dense arithmetic;
- a **sparser engine** handles only the listed non-zeros of the other columns,
  using a pre-loaded compressed-sparse-column (CSC) index.

The sparser engine has no Q storage of its own. It borrows Q rows from the
denser engine's Q buffer when it needs them ("Q forwarding").

Q and K travel from memory compressed over the heads by a small learned
auto-encoder (6 heads packed into 3). They are decoded on the way in, which
trades memory traffic for a few MACs.

This RTL computes one attention head per run:

    out[i] = act( softmax_over_mask( Q[i] . K^T / scale ) . V )

It takes int8 Q, K and V and produces int8 results.

## Datapath at a glance

```
 in stream (K, V, Q beats) ─► act_loader ─┬─ decoder (ae_engine 3→6) ─┐
                                          │                           ▼
                                          │       route by token index and kind
                                          ▼                           │
                  ┌──────────── denser_engine ◄─── Q (all rows), K/V of global tokens
                  │  Q buf ──► q_forward ──► sparser_engine ◄── K/V of other tokens
                  │                              ▲    IdxBuf (CSC + row view)
                  ▼                              │
             OBuf (dense half)            OBuf (sparse half)
                  └──────► softmax_normalizer ◄──┘
                               │  divide, saturate, activation_unit x8
                               ▼
                          out stream (8 int8 per beat)
 vitcod_ctrl sequences load → run → normalise; encoder (ae_engine 6→3) is a side stream
```

## MAC lines and the two accumulation modes

The arithmetic is built from one MAC cell, `mac_pe`. It has a multiplier and a
single adder. The adder's second operand is one of three things:

- the partial sum of the previous MAC (**inter-PE accumulation**);
- its own accumulator register (**intra-PE accumulation**);
- zero.

Eight cells form a `mac_line`. A `mac_group` chains eight lines, so one group
covers the 64 features of a row. This gives the engines two ways of working:

- **S = Q·Kᵀ (SDDMM, K-stationary).** One K row is held on the b inputs of a
  group. Each cycle a new Q row goes on the a inputs. The partial sums ripple
  through all 64 MACs, so the group produces one full 64-feature dot product
  per cycle. That is one element of the current attention column.
- **V' = S·V (SpMM, output-stationary).** The lines switch to intra-PE mode.
  Each MAC owns one output feature of one query row. Each cycle one exponential
  `e_ij` is broadcast to the group together with row `V_j`. After the row's
  last column, the 64 accumulators hold the un-normalised result.

Both engines have G row groups (default 4 each). That is 4 × 8 = 32 lines per
engine, 64 lines and 512 MACs in total, the size the design is specified for.
Both the engine and the top report the mode switch on `intra_mode` /
`dense_intra` / `sparse_intra`.

## Softmax without a second pass

The usual softmax needs every score of a row before anything can be scaled.
This RTL does not scale the scores. Instead, each engine keeps two sums per
query row in its output buffer (OBuf):

- `Σ e_ij · V_j` over the columns it owns;
- `Σ e_ij` over the same columns.

At the end, `softmax_normalizer` adds the two halves and divides:

    out[i][f] = sat8( trunc( (acc_d[f] + acc_s[f]) / (sum_d + sum_s) ) )

This equals `softmax(S)·V` restricted to the mask. It also means the two
engines never have to exchange scores.

A row with no non-zeros at all gives 0.

### Exponential (`softmax_unit`)

The exponential is computed in fixed point, without subtracting the row
maximum:

1. Take the score `s = sat_int8(dot >>> score_shift)`, read as Q4.4.
   `score_shift` folds in 1/√d and the scaling of Q and K.
2. Multiply by log₂e ≈ 369/256 to get `t`. `t` is then a Q4.4 power of two.
3. Look up `2^(frac(t))` in a 16-entry table, `round(1024·2^(k/16))`.
4. Shift the looked-up value by `int(t)`.

The result is an unsigned 16-bit Q6.10 number that saturates at 65535. Over
the whole score range its error against the real `e^s` is within about 6 %.

## Activation (`activation_unit`)

The activation unit has three modes, selected by `cfg.act_mode`:

| mode | function |
|---|---|
| 0 | bypass |
| 1 | ReLU, done by gating on the sign |
| 2 | GELU, approximated with a lookup table |

GELU uses `GELU(x) = ReLU(x) − c(|x|)` with `c(a) = a·Φ(−a)`. The table holds
`round(16·c(k/4))` for k = 0..15: `0,2,2,3,3,2,2,1,1,0,…`. x is read as Q4.4,
and the table index saturates at |x| ≥ 4.

In the full accelerator this unit serves the MLP layers. Here it sits on the
attention output path so that it can be used and tested.

## The sparse engine and its index buffer

The sparse columns are listed in the 20 KB index buffer: 10240 words of 16
bits. The host writes it through `idx_*` before the run. Addresses are:

| region | base | contents |
|---|---|---|
| col_ptr | 0 | `n_tok+1` entries; CSC start of each column (only columns ≥ ngt used) |
| row_ptr | 198 | `n_tok+1` entries; start of each row in the row view |
| row_idx | 396 | CSC row index of each non-zero, column by column |
| csr_col | 396+3281 | row view: column of each non-zero, row by row |
| csr_pos | 396+2·3281 | row view: CSC position of the same non-zero |

The CSC part drives SDDMM. For each sparse column j, K_j is held while G
non-zeros per cycle fetch their Q rows and write `e_ij` at their CSC position
in the S buffer.

The row view drives the output-stationary SpMM. Each group walks one query
row's non-zeros: it reads `e` at `csr_pos` and `V` at `csr_col`. Keeping both
views costs capacity: the buffer holds at most **3281 non-zeros** (NNZ_MAX).

An empty column costs one cycle. A group of rows takes as many SpMM cycles as
its longest row, plus one clear cycle and one write-back cycle.

## Q forwarding and stalls (`q_forward`)

The loader writes every Q row into the denser engine's Q buffer and sets one
presence bit per row. The sparser engine asks `q_forward` for up to G rows per
cycle, and `q_forward` checks the presence bits:

- **All requested rows present:** the rows are read through G extra read ports
  of the Q buffer. This counts as a forwarding hit.
- **Any requested row missing:** the sparser engine stalls until the row
  arrives. This counts as a forwarding stall.

The load order makes this visible, because K and V come first and Q last.
Both engines start as soon as K and V are in, so the early SDDMM columns can
overtake the Q stream. The denser engine also waits, with `stall_cycles`
counting, when it meets a row that has not arrived.

## Loading: stream format and decoding (`act_loader`)

The input is a valid/ready stream of 192-bit beats. A beat is 3 compressed
heads × 8 features × int8. Lane `(c·8+m)` is feature m of compressed head c.

Per head the order is all K rows, then all V rows, then all Q rows. Within
each, rows are in token order and each row is 8 beats of 8 features.

- **K and Q beats** go through the decoder (`ae_engine` with 3 inputs and 6
  outputs, weights loaded by `dw_*`), and head `cfg.head` is kept:
  `y = sat8((Σ_c w[head][c]·x[c]) >>> 6)`.
- **V beats** are not compressed and use the low 64 bits.

Rows are routed by token and kind:

- K/V rows of tokens `< ngt` go to the denser engine, the others to the sparser
  engine;
- Q rows always go to the denser Q buffer.

There is one beat per cycle and a one-cycle write latency.

The encoder (`ae_engine`, 6 → 3, weights via `ew_*`) is exposed as a separate
stream (`enc_*`), with one result one cycle after each input. In a full
accelerator it would compress Q/K after the projection layer.

## Control and timing (`vitcod_ctrl`)

`start` latches `cfg`, clears the Q presence bits and starts the loader. Then:

1. One cycle after the loader reports K and V complete, both engines start
   together.
2. When both engines are done and Q is fully loaded, the normaliser streams
   `n_tok × 8` output beats under `out_ready` back-pressure.
3. `done` pulses for one cycle.

Counters:

- `cyc_total`: busy cycles;
- `cyc_run`: cycles with both engines busy;
- `fwd_hits`, `fwd_stalls` and `dense_q_stalls`.

Denser engine cycles when Q is already loaded, with R = ⌈n_tok/G⌉:

    ngt·(1 + R) + 1 + R·(ngt + 2) + 1

That is, per global column one K load cycle plus R SDDMM cycles, a drain cycle,
then per row group a clear, ngt accumulate and a write-back cycle. For 197
tokens, ngt = 24 and G = 4 this is 2526 cycles.

The sparser engine takes:

- SDDMM: per sparse column, 1 + ⌈nnz_j/G⌉ cycles (1 for an empty column);
- SpMM: per row group, the longest row plus 2 cycles.

## Parameters

| parameter | default | where |
|---|---|---|
| N_MAX tokens | 197 | `vitcod_pkg` |
| D features per head | 64 | `vitcod_pkg` |
| MACs per line | 8 | `vitcod_pkg` |
| row groups per engine | 4 / 4 (`DENSE_G`, `SPARSE_G`) | `vitcod_top` |
| global columns NGT_MAX | 64 | `vitcod_top` |
| index buffer | 10240 × 16 bit, NNZ_MAX 3281 | `vitcod_pkg` |
| compressed / full heads | 3 / 6 | `vitcod_pkg` |

Synthesis at the defaults puts about 1.6 Mbit in the storage arrays. They are
written as register-file arrays with combinational reads; a chip would map them
to multi-ported SRAM macros.

## Where this RTL departs from the original design

- **One head per run.** The original processes all heads in parallel.
- **Fixed engine sizes.** The split of MAC lines between the engines is fixed
  by parameters. The original reallocates lines per layer in proportion to the
  dense and sparse work.
- **No GEMM mode.** The Q/K/V projection and the MLP layers are not built.
  Neither is the weight buffer that serves them.
- **No on-chip global buffers.** The separate global activation buffers are
  merged into the engine-local buffers. The DRAM controller is replaced by
  valid/ready streams.
- **No compiler.** Its output is replaced by the `cfg` port and the
  host-written index buffer.
- **Own number formats.** The formats, the exponential method, the deferred
  division and the GELU table are this design's choices; the original gives
  no widths.
- **Smaller sparse capacity.** The row view in the index buffer cuts the
  non-zero capacity below what a CSC-only buffer of the same size would hold.
  At 197 tokens and 90 % sparsity (3881 non-zeros), the remainder fits when at
  least 4 columns are global. At 80 % sparsity it needs 23 or more.
- **Token limit.** Sequences longer than N_MAX (for example 243 frames) need a
  larger N_MAX.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one:

- compares against values computed independently in the testbench;
- prints `TB_RESULT checks=N failures=M`;
- has a cycle watchdog.

Example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
  rtl/vitcod_pkg.sv tb/tb_vitcod_top.sv --top-module tb_vitcod_top -o sim
./obj_dir/sim
```

`tb_vitcod_top` runs the whole accelerator at its default size through three
heads:

| tokens | ngt | activation |
|---|---|---|
| 197 | 24 | bypass |
| 37 | 0 | GELU |
| 50 | 50 | ReLU |

It uses random masks with a diagonal band, random gaps on the input stream and
random output back-pressure. It checks every output against a reference model
written in the testbench, and the encoder stream separately. It also counts
each mechanism and fails if one of them never happened:

- forwarding hits and stalls;
- denser-engine Q stalls;
- mode switches in both engines;
- output back-pressure;
- empty sparse columns;
- rows with no sparse entries.

The build takes about 40 s and the run under a second.

`tb_denser_engine` checks the cycle formula above exactly. `tb_softmax_unit`
checks the exponential against real `exp` within 6 % + 1 LSB.

`tb_vitcod_workloads` runs heads shaped like the models this architecture
targets. Each head uses dense global columns plus a diagonal band and random
non-zeros, tuned to the target sparsity:

| head | tokens | sparsity | global | non-zeros (sparse part) | cycles |
|---|---|---|---|---|---|
| DeiT | 197 | 90 % | 8 | 3852 (2276) | 10320 |
| LeViT stage 1 | 196 | 80 % | 24 | 7668 (2964) | 11167 |
| LeViT stage 2 | 49 | 80 % | 4 | 455 (259) | 2389 |

The cycle counts include streaming every input beat with random gaps and
every output beat under random back-pressure. The load of 24 beats per token
dominates them, so they measure the interface more than the engines. The
counters `cyc_run` (both engines busy) and `fwd_stalls` show the engine side:
each is printed per head.
