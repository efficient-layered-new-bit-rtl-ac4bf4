# Column-layered bit-flipping decoder for BIKE (QC-MDPC), in SystemVerilog

BIKE decapsulation has to recover a sparse error vector `e = [e0 | e1]` of
length `2r` from a syndrome `s` of length `r`, given the private
parity-check matrix `H = [H0 | H1]`. Each of H0 and H1 is an `r x r` circulant
with `d = w/2` ones per column. The newer BIKE bit-flipping (BF) algorithm
repeats one step. For every column `j` it counts `sigma_j`, the number of
unsatisfied checks (ones of `s`) that the column takes part in. If
`sigma_j >= T`, it flips `e_j` and XORs column `j` into `s`. The threshold `T`
comes from an affine function of the syndrome weight `|s|`.

This RTL implements the column-layered, L-parallel form of that decoder
described in *"Efficient Layered New Bit-Flipping QC-MDPC Decoder for BIKE
Post-Quantum Cryptography"* (Cai and Zhang). Its main idea concerns memory.
In the algorithm as written, every column of an iteration is counted against
the syndrome from the start of that iteration. That forces a second copy of
`s` to collect the updates. In the layered schedule, each block of L columns
counts against the syndrome that already includes the flips of the blocks
before it. The syndrome can then be updated in place, and the decoder keeps
one copy of it. The decoder's memory is mostly syndrome memory, so the saving
is large.

The default configuration is the example decoder for 128-bit security:

| parameter | value | meaning |
|---|---|---|
| `R` | 12992 | circulant size r (= 203 x 64) |
| `W` | 142 | column weight of H, so `d = 71` |
| `L` | 32 | columns processed per cycle |
| `IMAX` | 7 | iterations, always all of them (constant time) |
| `DELTA` | 3 | threshold offset delta |
| `A_MANT / 2^A_FRAC` | 101 / 2^14 = 0.00616455078125 | a, the optimum 0.00618658 cut to its 7 most significant nonzero fractional bits |
| `B_FIX / 2^B_FRAC` | 1388 / 2^7 = 10.84375 | b, the optimum 10.8504 cut to 7 fractional bits |

These `a` and `b` are the coefficients that the authors re-optimised for the
layered schedule, at 7-bit precision. With 7 bits the decoding-failure rate
stays close to that of full precision. With 2 bits it degrades a lot.

## The thresholds

Let `T' = f(|s_0|)` with `f(x) = a*x + b`, where `|s_0|` is the weight of the
input syndrome, and let `M = (d+1)/2` (36 here). Iteration `i` uses

```
T_i = max( f(|s|),  T'+delta            i = 1
                    (2T'+M)/3 + delta   i = 2
                    (T'+2M)/3 + delta   i = 3
                    M + delta           i >= 4 )
```

Here `|s|` is the syndrome weight at the start of iteration `i`.
`threshold_unit` computes all of this in fixed point with 14 fractional bits,
which holds the 7-bit `a` and `b` exactly. It never rounds the real threshold:
`sigma` is an integer, so `sigma >= T` is equivalent to `sigma >= ceil(T)`, and
the unit outputs `ceil(T)`. The divisions by 3 use
`ceil(x / (3*2^14)) = ceil(ceil(x / 2^14) / 3)`, which is an exact identity.
The source describes no rounding at all, so this part is a design decision.
The threshold is one bit wider than the counters, because `T` can exceed `d`
and must then flip nothing.

## Column blocks, diagonals and RAM I

The `2r` columns form `2r/L` column blocks of `L` consecutive columns. All
columns of one block belong to the same circulant, because `r` is a multiple
of `L`. In a circulant, a one at row `p` of the block's first column continues
along a diagonal: rows `p, p+1, ..., p+L-1` (mod r) of the block's `L`
columns. A block therefore has exactly `d` diagonals, and each diagonal gives
every one of the `L` counters one syndrome bit. Lane `l` gets row `p+l` for
column `blockstart + l`. Counting a block takes `d` cycles, one diagonal per
cycle, whatever `L` is.

RAM I holds only the `d` row indices of the current block's first column, for
H0 and H1 side by side: `d` words of `2*ceil(log2 r)` bits, which is 71 x 28
bits. The host loads the indices of column 0. Moving to the next block of the
same circulant moves every diagonal down by `L` rows. The **H matrix
shifting** unit (`h_shift`) therefore writes each index back as
`(index + L) mod r` after its last use in a block. After `r/L` blocks an index
has moved by `r`, so it is back at its loaded value. RAM I is unchanged after
every iteration, and a new syndrome can be decoded with the same key without
reloading it.

## Syndrome banks, shifter and reverse shifter

RAM S stores `s` in block rows of `L` bits (rows `qL .. qL+L-1`). Even block
rows are in bank S0 and odd block rows in bank S1, each `r/(2L)` = 203 words
deep. A diagonal starting at row `p` has an arbitrary alignment. It always
lies within block rows `q = p/L` and `q+1`, and these two rows are in
different banks. `addr_gen` turns `p` into one address per bank (`addr0`,
`addr1`), the shifting offset `p mod L`, and the parity of `q`, which says
which bank holds the lower word. Because `r` is a multiple of `2L`, this also
works when the diagonal wraps from the last block row to block row 0. The RTL
requires `R % (2L) == 0`.

The **shifter** (`diag_shifter`) takes the 2L-bit window
`{upper word, lower word}` and outputs `window[offset +: L]`. It uses
`log2 L` rows of 2:1 multiplexers. The source mentions six multiplexer rows
for L = 32. Five are enough here, because the offset never exceeds `L-1`.
The **reverse shifter** (`rev_shifter`) does the inverse on the write side. It
places the `L` updated bits back at `offset` and keeps the other bits of both
words. Both words are then written back in place. No second copy of `s`
exists.

## Two passes per block, and the pipeline

Each column block is visited twice:

1. **Counting pass, `d` cycles.** Each cycle one diagonal is read, shifted and
   added into the `L` counters (`col_counters`, adder-register loops).
2. **Compare.** `flip_compare` registers `flip[l] = sigma_l >= T`.
3. **Update pass, `d` cycles.** The same diagonals are read again, XORed with
   `flip`, reverse-shifted and written back. This XORs each flipped column
   into `s`. The block's word of RAM E is XORed with `flip`, and `|s|` is
   advanced (see below).

`layer_ctrl` issues one operation per cycle, with no bubble between passes or
blocks. The datapath is a four-stage pipeline:

| stage | what happens |
|---|---|
| P0 | read RAM I at the diagonal number |
| P1 | pick the H0 or H1 index, `addr_gen`, read S0 and S1; in the update pass, write `index + L mod r` back to RAM I |
| P2 | form the window, shift; count pass: accumulate; update pass: register diagonal and words |
| P3 | update pass: XOR flips, reverse shift, write S0 and S1 |

The compare happens at P3 of a block's last counting operation. The flips are
ready at P3 of its first update operation, exactly when they are needed.

**Forwarding.** A write lands two cycles after its read. Two diagonals less
than one block row apart therefore share a word. This happens for
neighbouring nonzeros of a column and at block boundaries. The read data
would then miss the one or two writes still in flight. `ram_s` compares each
read address with the write in the current cycle and the write in the
previous cycle, and forwards the newest match. The source says only that
syndromes are "written back in place". The forwarding is what makes a
one-operation-per-cycle schedule correct. In the full-size test, with the H0
indices in ascending order, about one operation in ten used a forwarded word.

**Latency.** One iteration streams `(2r/L) * 2d` cycles, which is
812 x 142 = 115304 at the defaults. This is exactly the latency the source
reports for the decoder, which appears to be per iteration (the source does
not say so). The complete decode takes
`2(r/L + 4) + IMAX((2r/L)*2d + 7) + 1` cycles, 807998 at the defaults. That
count includes the initial and final syndrome-weight passes (406 cycles each)
and 7 cycles of pipeline drain and threshold computation per iteration.

## Syndrome weight

`syn_weight` is an adder-register loop. Before decoding, it sums the ones of
one 32-bit block row per cycle (8 groups of 4 bits counted by logic, then
added). During decoding, it adds `d - 2*sigma_j` for every flipped column `j`
of a block. This is the weight change from flipping a bit with `sigma_j`
unsatisfied checks. The tracked value is exact, except when two columns
flipped in the same block share a row. Their `sigma`s were counted before
either flip, so the shared row is counted wrongly. The thresholds use the
tracked value, as in the source. The success flag must be exact, so the
decoder recounts `|s|` from RAM S after the last iteration and reports
`success = (|s| == 0)`. The recount is an addition of this design. It costs
`r/L` cycles.

## Memories

| memory | shape | bits at defaults |
|---|---|---|
| RAM E | `2r/L` x L | 812 x 32 = 25984 |
| RAM S | 2 banks x `r/(2L)` x L | 2 x 203 x 32 = 12992 |
| RAM I | `d` x `2 ceil(log2 r)` | 71 x 28 = 1988 |
| total | | 40964 |

All are written as plain arrays with a registered, read-first read port and
one write port. A synthesis tool maps them to memory macros, and the arrays
come out at exactly these 40964 bits. RAM E has no clearing pass. In the
first iteration its old contents are ignored (`zero_old`), which has the
same effect as `e = 0`.

## Using the decoder

Top module: `bike_layered_bf_decoder`. Clock `clk`, asynchronous active-low
reset `rst_n`. The memories are not reset. The host ports act only while
`busy` is low.

1. Load the key: for `k = 0 .. d-1`, assert `idx_we` with `idx_addr = k` and
   `idx_data = {H1 row index, H0 row index}` of the k-th one of column 0 of
   H1 / H0. The order of the `k` does not matter. This is needed once per
   key.
2. Load the syndrome: for each block row `q = 0 .. r/L-1`, assert `syn_we`
   with `syn_row = q` and `syn_data[b] = s[qL + b]`.
3. Pulse `start`. `busy` rises. After the cycle count above, `done` pulses
   for one cycle and `success` is valid (it stays valid until the next
   `done`).
4. Read `e`: `e_rd` with `e_addr = k` returns `e[kL .. kL+L-1]` on `e_data`
   in the next cycle. Blocks `0 .. r/L-1` are `e0`, the rest are `e1`.

`syn_weight_o` shows the running `|s|`. Column `j` of H0 has ones at rows
`(h + j) mod r`, where `h` ranges over the loaded H0 indices (likewise for
H1). The syndrome loaded in step 2 must be `s = H e` in that convention.

Parameters other than the defaults are allowed if `L` is a power of two,
`R % (2L) == 0`, `R/(2L) >= 2`, `W` is even and `d >= 2`. The top's
`A_MANT/A_FRAC/B_FIX/B_FRAC` set other coefficient precisions, for example
the 2-bit set `3/2^9` and `43/2^2`. `A_FRAC >= B_FRAC` is required.

## What follows the source and what does not

Taken from the source: the column-layered schedule, the two passes per block,
the RAM I / H-matrix-shifting scheme, the even/odd RAM S banking with the
shifter and reverse shifter, the L counters and comparators, the threshold
function with 7-bit coefficients, the `|s| + d - 2 sigma` weight update, the
memory shapes, and the block structure of the architecture diagram. Names and
labels of that diagram are used for modules and signals where possible.

Chosen here, because the source is silent:
- the four-stage pipeline and the forwarding in RAM S;
- the ceil-based exact threshold rounding;
- the final recount of `|s|` for the success flag;
- host load and read ports and the start/done handshake;
- the group size of 4 in the popcount;
- the word order `{H1, H0}` in RAM I;
- merging in the reverse shifter, instead of bit-enable writes;
- skipping the read of RAM E in the first iteration instead of clearing it.

Not included: syndrome computation `s = c H0^T`, key generation and the rest
of BIKE. These come before and after the decoder. Also not included are the
decoding-failure-rate studies that chose `r`, `a` and `b`. Those are
statistical simulations, not hardware.

Limitations worth knowing:
- `R` must be a multiple of `2L`. The default `r = 12992` is one.
- The in-iteration `|s|` can differ slightly from the true weight (see above).
  This changes the threshold of a later iteration only in those rare cases,
  and the software reference in `tb/` models the same behaviour.
- The area and frequency results of the source (XOR-gate counts, an 8-level
  critical path in the comparators) were not reproduced. Only the memory
  total was checked against them.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb/bf_model_pkg.sv` is a direct software version of the layered algorithm.
It draws random keys and errors, computes `s = H e`, and decodes column by
column with exact integer thresholds. The end-to-end tests compare against
it:

- `tb_bike_layered_bf_decoder` works at r = 512, L = 8, d = 15, with `a` and
  `b` scaled to that small code. It runs six decodes with one key loaded
  once. It checks `e`, `success`, every iteration's threshold and the exact
  cycle count, and compares each successful `e` with the injected error. The
  last decode has too many errors and must fail. It also counts forwarding
  from the current and the previous write, diagonals wrapping past the last
  block row, blocks with several flips, and decoding failures. It fails if
  any of these never occurred.
  The key is built so that these events are certain. `h0[1] = h0[0] + 1`
  puts consecutive operations on shared words, and `h1[2] = h1[0] + 1` does
  the same for operations two apart. Two injected errors sit in adjacent
  columns that share a check.
- `tb_bike_full` uses the default parameters (r = 12992, L = 32, d = 71,
  7 iterations). It decodes two random weight-134 errors with the same key,
  and checks the same things plus the 807998-cycle count. It simulates in a
  few seconds.
- `tb_bike_precision2` repeats the full-size decode with the 2-bit
  coefficients (`a = 3/2^9`, `b = 43/2^2`).

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/bike_pkg.sv tb/bf_model_pkg.sv rtl/*.sv tb/tb_bike_full.sv \
    --top-module tb_bike_full
./obj_dir/Vtb_bike_full
```

For a unit testbench, replace the last file and the top module, for example
`tb/tb_ram_s.sv` and `--top-module tb_ram_s`.

## Files

`rtl/bike_pkg.sv` holds the defaults and the operation encoding.
`rtl/bike_layered_bf_decoder.sv` is the top level. The remaining modules are
`layer_ctrl` (sequencing), `ram_i`, `h_shift`, `addr_gen`, `ram_s`,
`diag_shifter`, `rev_shifter`, `col_counters`, `flip_compare`,
`threshold_unit`, `syn_weight` and `ram_e`. `tb/` holds one testbench per
module, the two end-to-end testbenches and the reference model package.
