# Titanus core: an LLM decoder layer that compresses its KV cache as it goes

A transformer decoder that generates text keeps the Key and Value vectors of every
token it has seen (the KV cache). With the weights held still in compute-in-memory
(CIM) arrays, the weights no longer have to be moved, and the KV cache becomes the
dominant off-chip traffic. This design shrinks that traffic at the moment a Key or
Value is produced, before it leaves the chip, in two steps in series:

1. **Pruning.** Each int8 element whose magnitude is below a per-layer threshold
   is dropped. Key and Value have separate thresholds. A bit map, the *index*,
   records which elements survived.
2. **Quantization of the survivors.** The surviving elements are quantized per
   channel to 2–4 bits. Many small values become code 0, and a second bit map,
   the *label*, records which codes are non-zero.

Only the two bit maps and the non-zero codes leave the chip. When the cache is
needed again, a dequantizer rebuilds int8 values from them. Both steps create
zeros, and the dot-product engines skip those zeros.

The awkward part is the per-channel quantization. Its scale and zero point come
from the range of a channel, but during generation new tokens arrive one at a
time and may fall outside the range seen so far. Re-quantizing the whole cache
each time would cost far too much. Instead, the design uses a **hierarchy of
levels**:

- Level 0 of each channel is fitted to the prefill (input-sequence) tokens.
- A later element that falls outside the current *tolerance range* opens a new
  level. Its range is widened to cover the element, and its scale and zero point
  are stored together with the number of the first token that uses it.
- Earlier tokens keep the level they were quantized with, so every token is
  quantized exactly once.

The RTL is one core, which handles one decoder layer at the OPT-125M size: 768
channels, 12 heads of 64, FFN 3072, 16-lane compression units, and 256-MAC
engines with one engine per head. A full model chains one core per layer. The
chain is not built here; see [Not built](#not-built).

## Data path of one core

```
tok_x ─► Q/K/V CIM ─► K,V ─► pruning unit ─► quantization unit ─► kvo_*  (to memory)
            │                                        │ SZ writes
            └─► Q, K ─► computing engines ─► sc_* (diagonal score q_t·k_t)
                                                     ▼
kvi_* ─► dequantization unit ◄── SZ buffer (all levels, all channels)
              └─► token assembler ─┬─ Key:   scored against current Q ─► sc_*
                                   └─ Value: vrec_* (for the weighted sum)
ctx ─► Out CIM ─► FC1 CIM ─► FC2 CIM ─► y  (to the next layer's core)
```

These stay outside the core and appear as ports: softmax, the score × V sum
that forms `ctx`, layer normalization, residuals, the FFN activation, and the
off-chip memory. The test benches model them where they need them.

## Compressed format

Each channel group of `PAR` = 16 channels of one token travels as one word per
group, for Key and Value side by side:

| field | width | meaning |
|---|---|---|
| `idx` | 16 | 1 = element survived pruning |
| `lbl` | 16 | 1 = its code is non-zero (subset of `idx`) |
| `q` | 16 × 8 | non-zero codes packed from entry 0 upward, in lane order |
| `cnt` | 5 | number of packed codes (popcount of `lbl`) |

Off chip only `idx`, `lbl` and the first `cnt` codes need to be stored. The
`tok` and `g` tags give the token number and group number.

## Number formats and the quantizer arithmetic

All formats below are this design's own choice.

- Data is signed int8.
- A scale `s` is unsigned UQ8.8 (16 bits, at least 1/256).
- A zero point `z` is an unsigned code in `[0, 2^b − 1]`.
- Range bounds are 10-bit signed integers.
- Rounding everywhere is half away from zero (`div_round` in `titanus_pkg`).

For a range `[rmin, rmax]` and `b` bits:

```
s     = round(256·(rmax − rmin) / (2^b − 1))        (≥ 1)
z     = clamp(round(−256·rmin / s), 0, 2^b − 1)
q(x)  = clamp(round(256·x / s) + z, 0, 2^b − 1)
x'(q) = sat8(round((q − z)·s / 256))
TR    = [rmin − s/512, rmax + s/512]                (half a step; s/512 in int8 units)
```

**Level 0.**

- The max/min finder starts each channel at max = −128, min = 127.
- It updates only on surviving (`idx` = 1) elements of prefill tokens.
- A channel that saw no survivor gets the range [0, 0].

**Level creation (decode tokens).**

- An element counts as out of range only if it survived pruning and lies outside
  the TR. The new level then covers `[min(lo, x), max(hi, x)]`, where `lo` and
  `hi` are the current TR bounds, and gets its own scale and zero point.
- The element that caused the new level is quantized with it.
- The entry `{scale, zp, base, start}` is written to the SZ buffer.
  - `base` = x'(0), the value of code 0.
  - `start` = the current token number.
- After `MAX_LEVELS` = 8 levels the channel stops growing. Out-of-range elements
  are then clamped to the end codes, and `ev_sat` is raised.

**Dequantization** picks, per channel, the last level whose `start` is not after
the token being rebuilt. It then applies:

| condition | result | multiplier used |
|---|---|---|
| `idx` = 0 | 0 | no |
| `lbl` = 0 (code 0) | stored `base` | no |
| code = `z` | 0 | no |
| otherwise | x'(q) | yes |

The results are identical to x'(q) in every case; the first three rows only
avoid the subtract and the multiply.

## The quantization unit and its schedule

Prefill tokens cannot be quantized until the whole input sequence has been seen, so the
quantization unit (`quantization_unit`) works in four states, run by
`qu_scheduler`:

| state | entered by | what happens |
|---|---|---|
| IDLE | reset | nothing |
| PREFILL | `start_seq` | each incoming group is stored in the quant buffer (up to `MAX_PREFILL` = 128 tokens), and the max/min finder updates; nothing leaves |
| QUANT | `prefill_end` | G = D/16 cycles derive level 0 for every group and write it to the SZ buffer; then one cycle per buffered group quantizes it and sends it out. The state lasts G + n·G cycles for n prefill tokens, and the unit takes no input during it |
| DECODE | end of QUANT | each incoming group is range-checked, possibly given new levels, quantized and sent out one cycle after it arrives |

Token numbers restart at 0 with `start_seq`, and are 10 bits wide (a context of
up to 1024 tokens). The bit-width table (`qcfg_*`) holds a Key and a Value
bit-width for each of the 12 layers. It resets to 3-bit Key and 2-bit Value.

## SZ buffer

The SZ buffer holds every level of every Key and Value channel:

- 2 × 768 channels × 8 levels × 42 bits = 64,512 bytes, plus 3-bit level counts.
- Its address is a channel group. A read returns all 8 levels of the 16 channels
  in that group one cycle later, so the dequantizer can choose the level
  combinationally.
- `start_seq` clears the level counts.

The 8-level limit is what fits in 64 KB with these entry widths.

## Computing engines

There is one engine per head, 12 in all, and each computes a dot product at 256
MACs per cycle. Inside an engine:

- The workload scheduler cuts a vector of `len` elements into 256-element chunks.
  - A vector shorter than 256 is case 1.
  - An exact multiple of 256 is case 2.
  - A multiple plus a remainder is case 3.
- Element j of a chunk goes to VPU j mod 4.
- Each VPU enables only the 16-lane MUs it needs: ceil(n/16) of them.
- In each MU a comparator enables only the lanes that hold data.
- A zero detector skips a multiply when either operand is zero.

An n-chunk vector gives `done` n + 1 edges after `start`. A 64-element head is
one chunk, a case-1 run.

The engines serve two clients, arbitrated by `top_controller`:

- **Diagonal score.** As soon as the Q, K and V projections of a token finish,
  the engines score q_t · k_t with the fresh, uncompressed K. This has priority.
- **Reconstructed Keys.** A Key read back through `kvi_*` and rebuilt by the
  dequantizer is scored against the current query. Such a request waits while
  the query is being recomputed.

Scores come out on `sc_*`, one 32-bit value per head, tagged with the token
number. `sc_diag` tells the two kinds apart.

## CIM blocks

Each of the six matrices (Q, K, V, Out, FC1, FC2) sits in a `cim_block`:

- The weights are written once through `w_*`, one row per cycle.
- The block computes `y[r] = sat8((Σ W[r][i]·x[i] + 2^(sh−1)) >> sh)`, one
  output row per cycle. `sh` is the per-block `cim_shift`.
- `done` comes OUT + 2 cycles after `start`.

The real macro is a digital CIM array from other work. Here it is modelled as a
synthesizable memory plus a MAC. Results match the macro, but area and energy
do not.

## Timing of one token (default sizes)

| step | cycles |
|---|---|
| Q/K/V projection (in parallel) | D + 2 = 770 |
| diagonal score visible on `sc_valid` | D + 6 after the token is accepted |
| pruning | D/16 = 48 groups, one per cycle |
| decode-stage quantization | groups leave one cycle after entering |
| reading one token back (K or V) | 48 groups, then 2 cycles of dequantizer latency |
| FFN chain (Out → FC1 → FC2) | 2·D + DFF + 6 cycles |

The token path is a two-stage pipeline:

- Stage 1 is the Q/K/V projection.
- Stage 2 is the pruning stream and the diagonal score.

The next token is accepted as soon as the diagonal score of the current one is
done, while the pruning unit may still be streaming the current token. This works
because the pruning unit copies K and V into its own buffer when it starts. At the
default sizes a new token can enter about every D + 7 cycles instead of every
D + 2 + 48 + a few.

`tok_ready` also waits for the engines to be free and for the quantization unit
to accept data. The FFN chain runs alongside the token path.

Give `prefill_end` only when `idle` is high. Otherwise the quantization unit would
enter QUANT while pruned groups are still arriving, and the assertion in
`quantization_unit` flags it.

## Where this RTL departs from the published design

- **Own pipeline split.** The token path is pipelined in two stages of this
  design's choosing. The published design pipelines prefill tokens inside a core
  but does not give its stages.
- **No global buffer.** Intermediate vectors are held in the CIM output
  registers and the token assembler instead.
- **Outside helpers not included.** Softmax, the attention-weighted sum and
  normalization are outside the core.
- **Own choices where the source gives no detail:**
  - the number formats, the tolerance-range margin (half a step) and the
    level-extension rule;
  - clamping after 8 levels;
  - all handshakes, reset values and latencies.

## Not built

- **The chain of 12 cores, one per layer.** The core gives the per-token hand-off
  (`y_valid`, `y`) that such a chain would use. The chain itself needs the
  softmax and normalization path between cores, which is not specified.
- **Larger models (1.3B to 13B).** These need larger D, DFF and HEADS. The RTL is
  parameterized for them, but only the 125M configuration is set as default and
  tested.

## Files

| file | content |
|---|---|
| `rtl/titanus_pkg.sv` | sizes, the SZ entry type, quantizer arithmetic |
| `rtl/titanus_core.sv` | top: one core |
| `rtl/top_controller.sv` | token path, engine arbitration, FFN chain |
| `rtl/cim_block.sv` | weight-stationary matrix–vector block |
| `rtl/pruning_unit.sv` | threshold table, K/V comparators, mask, non-zero packing |
| `rtl/quantization_unit.sv` | quant buffer, bit-width table, sub-blocks below |
| `rtl/max_min_finder.sv`, `nz_quantizer.sv`, `tolerance_updater.sv`, `lane_quantizer.sv` | prefill (level 0) path |
| `rtl/channel_monitor.sv` | decode path: range check, new levels |
| `rtl/qu_scheduler.sv` | the four-state schedule |
| `rtl/sz_buffer.sv` | level storage |
| `rtl/dequantization_unit.sv`, `nz_expand.sv` | rebuild of int8 values |
| `rtl/computing_engine.sv`, `ce_vpu.sv`, `ce_mu.sv` | zero-skipping dot-product engine |
| `tb/tb_<block>.sv` | self-checking test of each block |
| `tb/tb_titanus_core.sv` | end-to-end test at reduced size (256 channels, 4 heads, 4 levels) |
| `tb/tb_titanus_core_full.sv` | end-to-end test at the default (full) size |
| `tb/tb_titanus_core_workload.sv` | one OPT-125M layer at full size with 32 prefill and 32 generated tokens |
| `tb/tb_titanus_core_env.sv` | shared body of the two end-to-end tests, with a reference model |
| `tb/tb_ref.svh` | reference quantizer arithmetic in real numbers |

## Simulating

Each test bench prints `TB_RESULT checks=N failures=M` and stops. Build and run
one with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/titanus_pkg.sv tb/tb_titanus_core.sv --top-module tb_titanus_core
./obj_dir/Vtb_titanus_core
```

**The end-to-end test** does the following:

- writes random weights, thresholds and bit-widths;
- runs 6 prefill tokens, then 8 generated tokens of growing magnitude;
- after each generated token, reads the stored cache back through `kvi_*`;
- runs two FFN passes.

It checks every diagonal score, every rebuilt Value, every score of a rebuilt
Key, every index map and every FFN output against a reference model written with
real arithmetic. It also checks the diagonal and FFN latencies and the length of
the QUANT state.

It counts each mechanism, and a mechanism that never happened counts as a
failure. The mechanisms are: token-path pipelining, pruning, the QUANT state, level creation, clamping
with all levels used, the dequantizer's multiply skip, the engines' zero skip,
diagonal scores, scores of rebuilt Keys, rebuilt Values, and the FFN chain.

The full-size test runs the same body at the default sizes (3 prefill tokens, 3
generated tokens, one FFN pass) in about a minute. It does not require
clamping, since 8 levels are not used up that quickly. The workload test
runs a 32 + 32 token sequence at full size (about 1.5 minutes of simulation)
and reaches clamping in a few channels.

**Changing the design:**

- Sizes are parameters with the defaults above.
- `D` must be a multiple of 16 and of `HEADS`.
- A head must fit one engine (D/HEADS ≤ 256).
- `MAX_LEVELS` and `MAX_PREFILL` trade SZ and quant-buffer storage against how
  long a sequence runs without clamping.
