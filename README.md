# A weight-stationary SRAM compute-in-memory macro for attention scores

## The idea

An attention score is `s_ij = Q_i · K_j`, with `Q = X·W_Q` and `K = X·W_K`. Both
`Q` and `K` are produced at run time. A compute-in-memory (CIM) array that keeps
its operand in the memory cells would therefore have to rewrite that operand for
every new input, and `K` would even have to be transposed first. This is the
"dynamic matrix multiplication" problem of attention.

This macro uses a different grouping of the same product:

    S = X·W_Q·W_K^T·X^T = X·W_QK·X^T,        W_QK = W_Q·W_K^T  (precomputed once)
    s_ij = X_i · W_QK · X_j^T = sum_a sum_b x_i[a] · W_QK[a][b] · x_j[b]

`W_QK` depends only on the trained weights, so it is written into the SRAM once
and stays there (weight stationary). Only the two token vectors `X_i` and `X_j`
stream in. Neither `Q` nor `K` is ever formed.

The product has two run-time operands, so the macro works on bits. Each INT8
token element is written in two's complement,
`x = -2^7·x(7) + sum_{k<7} 2^k·x(k)`. Then

    s_ij = sum over bit pairs (p, q) of  sign(p)·sign(q)·2^(p+q) · T(p, q)
    T(p, q) = sum_a sum_b x_i[a](p) · x_j[b](q) · W_QK[a][b]

Here `sign(7) = -1` and `sign(k) = +1` otherwise. `T(p, q)` needs no multiplier.
The product of two bits is an AND, and an AND times a stored word is just
"read the word or read zero". That is what a gated SRAM word line does. The 64
bit pairs fall into four groups by sign:

| group | bits of x_i | bits of x_j | weight           | sign |
|-------|-------------|-------------|------------------|------|
| 4     | 0..6        | 0..6        | 2^(p+q)          | +    |
| 1     | 7           | 7           | 2^14             | +    |
| 2     | 7           | 0..6        | 2^(7+q)          | −    |
| 3     | 0..6        | 7           | 2^(p+7)          | −    |

The hardware has two parts. A **CIM bank** computes `T(p, q)` for one bit pair
at a time. A **near-memory computing module** shifts each `T` by `p+q`, adds it
into its group's sum, and then adds or subtracts the four group sums. Group 4 is
the general case and is processed first. Groups 1, 2 and 3 follow.

## Block structure

```
            token load          weight write/read
                |                     |
   +------------v-----------+   +-----v------------------------------------+
   | input_buffer_skip_zero |   | cim_bank                                 |
   |  X_i, X_j, bitplanes,  |-->|  wordline_unit (row decoder, input unit) |
   |  zero-bit skipping     |   |  local_controller (column decoder)       |
   +------------^-----------+   |  64 x sram_array (64 rows x 8 bit)       |
                |               |  64 x cim_accumulator (14 bit, alternating|
   +------------+-----------+   |       28T/14T ripple adder)              |
   | global_controller      |   +-----+------------------------------------+
   |  groups, bit pairs,    |         | 64 x 14-bit partial sums
   |  token pipeline, stall |   +-----v------+   +----------------------+
   +------------------------+   | adder_tree |-->| near_cim_accumulator |
                                +------------+   |  << (p+q), group sum |
                                                 +----------+-----------+
                                                            | ± (negate/mux)
                                                 +----------v-----------+   +---------------+
                                                 | polynomial_addition  |-->| output_buffer |--> s_ij
                                                 +----------------------+   +---------------+
```

`cim_macro` is the top level. Every module lives in `rtl/<module>.sv`. The shared
sizes and the group enumeration are in `rtl/cim_pkg.sv`.

## The CIM bank: how one bit pair is computed

**Storage layout.** There are 64 arrays of 64 rows × 8 bits, which is
64×64×8 bits in total. Array `b` holds column `b` of `W_QK`. Row `a` of every
array holds row `a`. So word `(row a, array b)` is `W_QK[a][b]`.

**Word lines.** The 64 row word lines are shared by all arrays.

- In compute mode, `wordline_unit` raises row `a` only if three things are all
  true: the row is addressed, compute mode is on, and the token bit
  `x_i[a](p)` is 1. This is a three-input AND, followed by a mux that picks
  the compute line or the read/write line.
- At its entry, each array ANDs the word lines with its own gate `col_en[b]`.
  In compute mode `local_controller` drives that gate with `x_j[b](q)`. In
  read/write mode it drives it with the decoded column address.

**Read bit lines.** A read bit line is modelled as a wired OR of all enabled
cells, the way a domino read line behaves. With one row raised it returns the
stored word. With the row or the array gated off it returns 0. Array `b`
therefore outputs `x_i[a](p) · x_j[b](q) · W_QK[a][b]` in the cycle when row
`a` is issued.

**Per-array accumulator.** `cim_accumulator` registers that 8-bit word. It then
sign-extends it to 14 bits and adds it into a 14-bit partial sum. The adder,
`bit_alt_adder`, is a ripple-carry chain of `full_adder` cells. The cells
alternate between the 28-transistor flavour (even bits) and the
14-transistor flavour (odd bits). In RTL both flavours are the same Boolean
full adder; the flavour is only recorded in a parameter. Fourteen bits hold
any sum of 64 INT8 words exactly (range −8192 … +8128).

One compute cycle handles one row `a` for all 64 columns at once. After the
rows of a bit pair, `psum[b] = sum_a x_i[a](p)·x_j[b](q)·W_QK[a][b]`. The adder
tree then sums the 64 columns into `T(p, q)` (20 bits).

**Read/write mode.** While the macro is idle, `w_we` writes one word at
`(w_row, w_col)`. `w_re` returns one word on `w_rdata` one cycle later. The
bank's `compute` input is the controller's `busy`, so these are two exclusive
modes.

## Zero-value bit skipping

Token bitplanes are often sparse. Padding tokens are all zero, and small values
have zero high bits. `input_buffer_skip_zero` uses this in two ways:

- **Row skipping.** Only rows `a` with `x_i[a](p) = 1` are issued. A
  find-first-set over the remaining bitplane mask picks the next row, one per
  cycle.
- **Pair dropping.** If the `x_i` bitplane or the `x_j` bitplane of a pair is
  all zero, the pair contributes nothing, and it is dropped without issuing
  any row.

A zero `x_j[b](q)` inside a nonzero plane cannot save a cycle, because all 64
arrays work on the same row in parallel. It only keeps that array's word line
low.

With `skip_en = 0`, all 64 rows are issued for every pair and the input bit
gates the word line. This makes a cycle-for-cycle comparison possible.

## Sequencing and latency: the bank and the near-memory side run concurrently

`global_controller` walks the 64 bit pairs in group order 4, 1, 2, 3. Within a
group, `q` varies fastest.

**The bank never waits for the near-memory side.** The first pair is requested
in the cycle `start` is taken. Each later pair is requested in the same cycle in
which the input buffer reports the previous pair done. Rows therefore flow into
the bank back to back across pairs. There is no clearing cycle between pairs:
the first row of a pair carries a flag (`issue_first`), and on that row every
per-array accumulator adds the word to 0 instead of to its old sum.

**Every finished pair leaves a token in a four-stage delay line.** The token
holds the shift `p+q`, whether the pair opens or closes its group, whether the
group is subtracted, whether the pair was dropped, and whether it is the last
pair of the score. If the pair's last row was issued in cycle `d`:

| cycle | stage | what happens |
|-------|-------|--------------|
| d+1   | drain | the last read word moves from the accumulator input register into the partial sum; the next pair's first row is already being read |
| d+2   | tree  | the 64 final partial sums are on `psum`; the adder tree registers `T(p, q)` at the end of the cycle, the same edge at which the next pair's first word overwrites `psum` |
| d+3   | near  | group sum += `T << (p+q)`; on the first pair of a group the sum is loaded instead, and a dropped pair adds 0 |
| d+4   | poly  | on the last pair of a group: score ± group sum (groups 2 and 3 are subtracted) |

A dropped pair still costs one cycle in the input buffer. Its token goes
through the same stages, so the group bookkeeping needs no special case. After
the last group, the controller writes the score into the output FIFO. It waits
(stalls) while the FIFO is full. A new `start` is accepted only after that.

Measured from the cycle in which `start` is sampled up to the cycle in which
`s_valid` rises:

    latency = sum over the 64 pairs of (rows(p), or 1 if dropped) + 6 + stall cycles

Here `rows(p)` is the number of ones in the `x_i` bitplane `p` (64 without
skipping). A dense score without skipping takes 64·64 + 6 = 4102 cycles. With
skipping, tokens whose bits are ten percent ones need about 6 rows per pair
instead of 64, so a score takes about a tenth of the time.

## Interface of `cim_macro`

All signals are synchronous to `clk`. `rst_n` is an active-low asynchronous
reset.

| port | dir | width | meaning |
|------|-----|-------|---------|
| `w_we`, `w_row`, `w_col`, `w_wdata` | in | 1, 6, 6, 8 | write `W_QK[w_row][w_col]` (idle only) |
| `w_re` → `w_rdata`, `w_rvalid` | in → out | 1 → 8, 1 | read a weight, answer one cycle later (idle only) |
| `x_we`, `x_sel`, `x_idx`, `x_data` | in | 1, 1, 6, 8 | write element `x_idx` of `X_i` (`x_sel=0`) or `X_j` (`x_sel=1`) (idle only) |
| `skip_en` | in | 1 | zero-value bit skipping on |
| `start` → `busy` | in → out | 1 | compute the score of the loaded tokens |
| `s_valid`, `s_ready`, `s_data` | out, in, out | 1, 1, 36 | 4-deep result FIFO, signed score |

An assertion flags writes while `busy`, and the writes are also blocked in
hardware. The 36-bit score covers the full INT8 range: the extreme case of all
operands equal to −128 gives −2^33.

## Larger models: tiling

A head of a model with `d_model` wider than 64 has a `d_model × d_model` W_QK.
For the ViT configuration (`d_model = 512`) that is 64 tiles of 64×64, and for
the DETR configuration (`d_model = 768`) it is 144 tiles. A single macro
computes such a score as a sum of tile scores
`X_i[A]·W_QK[A][B]·X_j[B]^T`. The host rewrites the tile between runs and adds
the results. `tb/tb_workload_tiled_head.sv` does exactly that for one score of
each size and checks the sum.

## What follows the published design and what is this RTL's own

Taken from the published design:

- the `W_QK` reformulation;
- the four-group bit-serial decomposition, with group 4 first;
- 64 arrays of 64 × INT8, one 14-bit accumulator per array, with sign
  extension and an input register;
- the alternating 28T/14T ripple adder;
- word lines gated by the AND of the two input bits, with a read/write versus
  compute mux;
- zero-value bit skipping in the input buffer;
- an adder tree, a near-CIM shift-and-accumulate, a negate/mux path into the
  polynomial addition unit, and an output buffer.

This RTL's own choices, where the published description is silent:

- the host interface and its handshakes;
- the token buffer (two 64-element vectors, loaded one element per cycle);
- the scan-based skipping, the pair dropping and the `skip_en` switch;
- the controller's token delay line and exact cycle plan, and the first-row
  load that replaces a clearing cycle between pairs;
- the order of groups 1, 2, 3;
- the adder-tree shape, and all widths beyond the 14-bit accumulator;
- the FIFO depth (4);
- the reset style;
- the one-cycle weight-read latency.

Not modelled, because their behaviour is carried by the RTL without logic of
their own:

- the transistor-level 6T cell with separate write and read bit lines;
- the multi-level NP-domino buffering of the read bit line;
- the transistor-level difference between the 28T and 14T full adders.

Known differences:

- The macro's reported peak throughput of 42.27 GOPS at 100 MHz cannot be
  derived from the published description, and this RTL does not try to
  reproduce it. Here a dense INT8 score of 8192 operations takes 4102 cycles
  without skipping.
- The bank and the near-memory module overlap within one score, but two
  scores never overlap: the next score's rows start only after the previous
  score has been written to the output FIFO.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and stops. With plain Verilator, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/cim_pkg.sv tb/tb_cim_macro.sv \
              --top-module tb_cim_macro -Mdir obj_tb_cim_macro -o sim
    ./obj_tb_cim_macro/sim

`-Irtl` lets Verilator find each module by its file name. Use
`-Wno-fatal` if your Verilator version treats style warnings as errors.

The testbenches:

- `tb_cim_macro` runs the whole macro at full size (about 3 s). It checks
  scores against the integer reference and the latency against the formula
  above. It covers dense, sparse, zero-padded and extreme tokens, skipping on
  and off, weight read-back between scores, and a full output FIFO that
  stalls the controller.
- `tb_workload_tiled_head` computes one tiled score at `d_model` 512 and 768
  (about a minute).
- The unit testbenches compare each block with an independent model:
  exhaustive for the full adder and the word line unit, random otherwise.

To change the size, edit `ROWS`/`ARRAYS`/`K`/`WBITS` in `rtl/cim_pkg.sv`. The
score width `S_W` follows automatically. `ROWS` must equal `ARRAYS` (the two
tokens index the rows and columns of a square `W_QK`), and `ARRAYS` must be a
power of two for the adder tree.
