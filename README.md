# Low-power symbol remapping for a PAM-3 DRAM bus

A PAM-3 data line carries one of three levels, -1, 0 or +1. With the line
terminated as assumed here, the three levels draw different termination
power: -1 costs VDD²/100, 0 costs half that, and +1 costs nothing. Memory
traffic is far from uniform: in traces of real programs the -1 level often
makes up well over half of all symbols. So it pays to rename the levels,
beat by beat, so that the most common symbol is sent as +1 and the rarest as
-1. A few extra flag wires tell the receiver which renaming was used.

This RTL encodes one 24-bit bus beat per clock. It modulates the beat onto
two PAM-3 lines and then applies one of three renaming schemes, selected per
beat:

| scheme    | what it does                                        | flag wires |
|-----------|-----------------------------------------------------|-----------:|
| PAM3-DBI  | negate every symbol if -1 outnumbers +1             | 1          |
| PAM3-MF   | exchange the most frequent symbol with +1           | 2          |
| PAM3-SORT | send most / middle / least frequent as +1 / 0 / -1  | 3          |

DBI and MF cut termination power by about the same amount. SORT always finds
the cheapest of the six possible renamings, at the cost of a sorter and one
more flag wire.

## Cost model

Termination power is counted in units of VDD²/200. A beat then costs

    P = 2·cnt(-1) + 1·cnt(0) + 0·cnt(+1)

where cnt(s) is the number of symbols equal to s over both lines (16
symbols per beat). Every scheme here applies one permutation of {-1, 0, +1}
to all 16 symbols of a beat, so the counts are only reassigned to other
levels. Power is lowest when the largest count lands on +1 and the smallest
on -1. SORT does exactly this. MF gets the first half right. DBI can only
choose between the identity and negation. Negation swaps cnt(-1) and cnt(+1)
and leaves cnt(0) alone, so it helps exactly when cnt(-1) > cnt(+1).

## Modulation: 24 bits onto two lines (`pam3_mapper`)

The three 8-bit words X, Y and Z of a beat are read column by column. Bit i
of each word forms the code {X[i], Y[i], Z[i]}. That 3-bit code is sent as a
pair of symbols, first symbol on line X slot i, second on line Y slot i:

| XYZ | pair     | XYZ | pair     |
|-----|----------|-----|----------|
| 000 | -1, -1   | 100 |  0, +1   |
| 001 | -1,  0   | 101 | +1, -1   |
| 010 | -1, +1   | 110 | +1,  0   |
| 011 |  0, -1   | 111 | +1, +1   |

Eight codes need eight of the nine possible pairs. The unused pair is [0, 0],
which makes the table odd-symmetric: the bitwise complement of a code maps to
the negated pair. Inverting the data bits of a beat is therefore the same as
negating its symbols. This is why DBI can work on symbols. Fed uniform random
bits, the mapping gives 37.5 % -1, 25 % 0 and 37.5 % +1.

Inside the RTL a symbol is a 2-bit code (`pam3_pkg::sym_t`): -1 = 0, 0 = 1,
+1 = 2. The value 3 never leaves the mapper. The code of a symbol equals its
index in the count vector [cnt(-1), cnt(0), cnt(+1)], so an argmax or a rank
over the counts is directly a symbol code. This coding only matters inside the
digital logic. The line driver would turn it into levels.

## The three encoders

All three are combinational. Each has its own three counters (`pam3_counter`,
three population counts over 16 symbols, 5 bits each).

**PAM3-DBI (`pam3_dbi_encoder`).** `inv_flag = cnt(-1) > cnt(+1)`. When it is
set, every symbol is negated. A tie does not invert. The receiver negates
again when the flag is set.

**PAM3-MF (`pam3_mf_encoder`).** The flag is the code of the most frequent
symbol (0, 1 or 2). Ties go to the lower code, so -1 wins over 0 and 0 wins
over +1. That symbol and +1 are exchanged through the swapper. The third
symbol keeps its level, and when +1 already leads, nothing changes. The
exchange undoes itself, so the receiver applies the same exchange.

**PAM3-SORT (`pam3_sorter`, `pam3_sort_encoder`).** The sorter ranks the
three symbols by count, least frequent first. Equal counts keep the order
-1, 0, +1, which is a stable sort. The rank of a symbol is the level it is
sent as: rank 0 → -1, rank 1 → 0, rank 2 → +1. So the swapper's map is just
the rank vector. The order is numbered with this table, and the number goes
out on the three flag wires:

| perm | least | middle | most |
|-----:|:-----:|:------:|:----:|
| 0    | -1    | 0      | +1   |
| 1    | -1    | +1     | 0    |
| 2    | 0     | -1     | +1   |
| 3    | 0     | +1     | -1   |
| 4    | +1    | -1     | 0    |
| 5    | +1    | 0      | -1   |

The rows are in lexicographic order, so the sorter computes
`perm = 2·code(least) + (code(middle) > code(most))` instead of searching a
table. Flag values 6 and 7 are never sent. To decode, the receiver maps
received -1, 0, +1 back to the least, middle and most entries of row `perm`.

Worked example (the one the table comes from): counts -1: 7, 0: 4, +1: 5
give the order 0, +1, -1, which is permutation 3. Every 0 is sent as -1,
every +1 as 0 and every -1 as +1. The beat's cost falls from 18 to 13 units.

The original description of this example is not consistent. Its prose calls
the order "[-1, +1, 0]" and says -1, +1 and 0 become -1, 0 and +1. Its table,
its count values and its caption give "[0, +1, -1]" for number 3. The RTL
follows the table. The ranking rule is the same under either reading; only
the example differs.

**Swapper (`pam3_swapper`).** MF and SORT share one block. It looks up every
symbol of both lines in a 3-entry map. An assertion checks that the map is a
permutation, since any other map could not be decoded.

## Top level: `pam3_bus_encoder`

```
word_x/y/z ─► pam3_mapper ─┬─► pam3_dbi_encoder ──┐
                           ├─► pam3_mf_encoder  ──┼─► mux(mode_i) ─► register ─► lines_o, flag_o
                           └─► pam3_sort_encoder ─┘
```

| port      | dir | width          | meaning                                         |
|-----------|-----|----------------|-------------------------------------------------|
| clk       | in  | 1              | clock                                           |
| rst_n     | in  | 1              | synchronous reset, active low                   |
| valid_i   | in  | 1              | beat present                                    |
| mode_i    | in  | 2 (enum)       | 0 DBI, 1 MF, 2 SORT                             |
| word_x/y/z| in  | 8 each         | the three words of the beat                     |
| valid_o   | out | 1              | encoded beat present                            |
| lines_o   | out | 2 × 8 × 2 bits | `lines_o[0]` line X, `lines_o[1]` line Y        |
| flag_o    | out | 3              | flag of the selected scheme, zero-extended      |

Timing: one beat per clock. The beat presented before a rising edge appears
on `lines_o`/`flag_o` right after that edge, with `valid_o` high: a latency of
one register stage. With `valid_i` low, the outputs hold their last values.
Reset clears `valid_o`, the lines (to code 0) and the flag. `mode_i = 3` is
not a mode. An assertion flags it, and the beat is encoded as DBI. Nothing is
stored from one beat to the next, so the encoder has no state beyond the
output register.

The only parameter is `SYMS_PER_LINE` (default 8). It is also the word
width. Other values are untested: the testbenches and the reference model
assume 8.

The three encoders run in parallel so the scheme can change per beat. A
product would pick one scheme and keep one set of counters. DBI is then the
smallest.

## Results on random data

`tb_pam3_random_workload` streams 30 000 random beats through the top in each
scheme. It compares the termination power of the lines before and after
encoding. The flag wires are not counted.

| quantity              | this RTL | published figure |
|-----------------------|---------:|-----------------:|
| share of -1 / 0 / +1  | 37.5 / 24.9 / 37.6 % | 37.601 / 24.936 / 37.463 % |
| PAM3-DBI power ratio  | 82.8 %   | 82.986 %         |
| PAM3-MF power ratio   | 82.3 %   | 82.611 %         |
| PAM3-SORT power ratio | 74.4 %   | 76.815 %         |

DBI and MF agree to within 0.3 points. SORT comes out about 2.4 points
better than published. The scheme as described can do no better than 74.4 %
on this data, because it already picks the cheapest renaming of every beat.
Sorting each line on its own gives 63.7 %, so that reading does not
explain the gap either. The test holds DBI, MF and the symbol shares to ±1 point of the
published values. For SORT it checks only SORT < MF ≤ DBI.

The published study also ran memory traces of MiBench programs
(basicmath, qsort, bitcnt, FFT, dijkstra, patricia, sha), with power ratios
between about 9 % and 59 %. Those traces are not included. Any trace runs,
since the encoder streams beats and keeps no state. Switching power was also
reported, but without a definition, so it is not modelled.

## Choices made in this RTL, not given by the scheme

- Bit i of each word forms column i, and a pair's two symbols go to line X
  and line Y in the same slot. The 16 symbols could also be split in time;
  the counts and the power would be the same.
- 2-bit symbol coding; flag coding of MF (the symbol's code).
- Tie rules: DBI does not invert on cnt(-1) = cnt(+1); MF takes the lowest
  code among equal maxima; SORT sorts stably. Only the MF rule affects
  power: on a tie between -1 and 0, sending -1 as +1 is the cheaper choice.
  The other tie rules do not change the power.
- Counting runs over both lines together, with one flag per beat. A reading
  with one sort per line would need a flag per line.
- Combinational encoders with one output register, reset values and the
  per-beat mode select.
- The inversion is done on symbols, which under this mapping is the same as
  inverting the data bits.

## Not included

- The receiver-side decoder. Its function follows from the flags (see above)
  and the reference model in `tb/pam3_ref_pkg.sv` implements it, but there is
  no RTL for it.
- The analog PAM-3 line drivers, termination and the rest of the memory
  system.

## Files

`rtl/`: `pam3_pkg` (symbol type and codes, mode enum, helpers),
`pam3_mapper`, `pam3_counter`, `pam3_swapper`, `pam3_sorter`,
`pam3_dbi_encoder`, `pam3_mf_encoder`, `pam3_sort_encoder`,
`pam3_bus_encoder` (top).

`tb/`: one self-checking testbench per module (`tb_<module>`),
`tb_pam3_random_workload`, and `pam3_ref_pkg`, the reference model. The
model is written independently of the RTL. It works on integer levels,
numbers the pairs in ternary, implements DBI by inverting the data bits,
sorts by bubble sort and looks the order up in the table. It also holds the
decoders and the demodulator that the round-trip checks use.

Each testbench ends with a line `TB_RESULT checks=N failures=M`.
`tb_pam3_bus_encoder` runs the top at its default size. It sends 6000 beats
with random schemes, idle cycles and resets. It checks every output beat, the
one-clock latency and a full decode back to the original words. It also
checks that every flag value of every scheme occurred.

## Simulating

From the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/pam3_pkg.sv tb/pam3_ref_pkg.sv tb/tb_pam3_bus_encoder.sv \
    --top-module tb_pam3_bus_encoder
./obj_dir/Vtb_pam3_bus_encoder
```

Replace `tb_pam3_bus_encoder` with any other testbench name. Each one runs in
well under a second. To lint the design:
`verilator --lint-only -Wall -y rtl rtl/pam3_pkg.sv rtl/pam3_bus_encoder.sv`.
The one remaining lint warning is the unused cnt(0) in the DBI encoder. DBI
does not need that count; it comes from the shared counter block.
