# OPT4E: a sparse, bit-weight-serial tensor engine in SystemVerilog

An ordinary INT8 multiply-accumulate unit always does the same work. It
encodes the multiplicand into four radix-4 digits, builds four partial
products, compresses them and adds the result into a 32-bit accumulator,
every cycle and for every operand. Many of those digits are zero, however,
and the wide carry-propagate accumulator sets the clock period.

This engine computes `C = A x B` (INT8 x INT8 into INT32) in a different
order:

```
C[m][n] = sum over bw = 0..3 of  4^bw * ( sum over k of d_bw(A[m][k]) * B[k][n] )
```

Each value `A[m][k]` is rewritten as four signed digits `d_bw`, one per bit
weight `bw`. The engine then works on one bit weight at a time, as an outer
loop. Within a pass only the non-zero digits are sent into the array.

This changes three things:

- **Cheaper PEs.** Each processing element (PE) multiplies by a digit in
  `{-2,-1,0,1,2}`. That needs only a choice between `B`, `2B`, `-B` and `-2B`,
  not a multiplier.
- **Cheaper accumulation.** Sums are kept in carry-save form, and the shift by
  `4^bw` is left out of the array. The array therefore never does a
  carry-propagate add.
- **Time follows the non-zero digits.** A reduction over `K` takes about as many
  cycles as there are non-zero digits, not `K` cycles.

A SIMD unit outside the array does, once per output and pass, the one real
addition and the shift.

The RTL implements the last and largest variant of this idea, called
**OPT4E**. In OPT4E, four PEs share one compressor and one accumulator as a
*PE group*. The digit encoders sit outside the array, once per row of A
instead of once per PE, so they can see the zeros. Because they can see the
zeros, operand B is fetched only for the digits that are non-zero.

## Default size

| Parameter | Default | Meaning |
|---|---|---|
| `MP`, `NP` | 32, 32 | PE groups in the array (rows of C by columns of C per tile) |
| `G` | 4 | PEs per group (the paper's number; the group RTL requires 4) |
| `KP` | 4 | values of A (and rows of B) per memory word |
| `ACC_W` | 32 | accumulator width (INT32) |
| `V` | 32 | outputs the SIMD core finishes per cycle |
| `DKS_MAX` | 4 | K up to `G*MP*KP*DKS_MAX = 2048` |
| `M_MAX`, `N_MAX` | 128, 128 | rows of A and columns of B the banks hold |

That makes 4096 PEs. At one digit per PE per cycle and an average of about
2.27 non-zero digits per INT8 value, a 2 GHz clock would give about
7.2 TOPS. The array size and `G`, `KP` and `ACC_W` follow the paper. `V`, the
memory sizes and all interfaces are this design's own choices.

## The digits (`ent_encoder`)

The encoder works from the lowest 2-bit slice of the byte upwards, keeping a
carry:

- slice value plus carry of 0, 1 or 2 gives that digit, with no carry out;
- 3 gives digit -1 with carry 1;
- 4 gives digit 0 with carry 1;
- the top slice is read as a signed value (-2..1) and takes the carry, so the
  top digit lies in -2..2.

Examples: 91 gives digits (low to high) 1, 2, -1, -1. 124 gives 2, 0, -1, 0.
The encoder rebuilds every value from -128 to 127 exactly; the testbench
checks all of them.

A digit is carried as a 3-bit signed number. The paper draws a 2-bit select
line. Two bits are enough for `{-1,0,1,2}`, and the low two bits of this
design's digit are exactly those codes. The top digit of some INT8 values,
however, is -2 or 2 (for example -128 and 127), so this design uses a third
bit.

Over all 256 INT8 values, the number of non-zero digits per value comes out
as follows:

| Non-zero digits | 4 | 3 | 2 | 1 | 0 |
|---|---|---|---|---|---|
| Values | 81 | 108 | 54 | 12 | 1 |

This matches the paper's table for the modified Booth code. The paper's
EN-T row is slightly sparser (72/108/60/15/1). This rule was chosen because
it reproduces every encoded example printed in the paper. The exact EN-T
encoder is published elsewhere and was not reconstructed. Any digit rule
with the same digit set can be placed in `ent_encoder.sv` without touching
the rest of the design.

## One pass: the column front end (`column_frontend`, `sparse_encoder`, `prefetch_b`)

K is cut into four quarters, one per PE of a group. The 32 groups that
compute row `m` of the current C tile all use row `m` of A; the RTL calls
such a line of groups a *PE column*. For each PE column and each quarter `l`
there is one **column front end**, which drives PE `l` of all 32 groups of
that column. That gives 128 front ends.

In one pass, a front end does the following:

1. It reads one word of A from its memory bank each cycle. A word is `KP = 4`
   values of row `m`.
2. It encodes the four values, keeps the digits of the current `bw`, and
   builds the mask of the non-zero ones.
3. If the mask is all zero, the step is dropped there and costs nothing
   further. Otherwise the step goes into a two-entry queue.
4. The sparse encoder takes the lowest set bit of the current step each
   cycle and clears it. It yields the index `i` of a non-zero digit.
5. `prefetch_b` turns `(step, i)` into a read of the row `k` of B. That row
   holds 32 bytes, one per column of the tile. The digit is delayed one
   cycle so that it reaches the PEs together with the returned row.

A pass over `K` therefore costs one cycle per non-zero digit. The A fetch,
at one word per cycle, sets a floor of `K/(G*KP)` words per front end. When
a read request of A or B is refused, the front end holds its state and
tries again in the next cycle.

## Memory banks and the stagger (`sram_bank`, `noc_xbar`)

Each operand memory has `G*MP = 128` banks. Bank `(l, j)` holds part `j` of
quarter `l` of K. A part is `dks` consecutive words, with `dks = K/512`.

Front end `(m, l)` starts its walk in bank `(l, m mod MP)`. It moves to the
next bank every `dks` words and wraps around. The sum over K is the same in
any order, so each row starts at a different place in K. While all rows
advance at the same speed, they never want the same bank at the same time.

For each quarter and each operand, a 32 x 32 read crossbar connects the 32
front ends of that quarter with its 32 banks. Eight crossbars in all.

Rows do **not** advance at the same speed, because their digit counts
differ. After a few steps they drift into each other's banks. The crossbar
grants each bank to the lowest-numbered requester. A refused requester
stalls for one cycle and retries. Data returns one cycle after the grant.

This is the largest place where measured behaviour differs from the paper's
wording: the paper expects the layout to avoid conflicts. In the default
testbench at full size with random data (32 x 32 x 512), 12309 reads were
refused, and the complete run took 687 cycles.

The drift is built into the schedule. Columns synchronise once per bit-weight
pass, and within a pass every column walks the whole of its K range. The
layout is therefore conflict-free only while all columns move in step.

The workload test (`tpe_opt4e_workload_tb`, on an 8 x 8 group array) puts a
number on this. It uses normally distributed A (standard deviation 25) and
the reduction lengths of real layers:

| Layer | K | Cycles | Refused reads | Non-zero digits per value | Cycles if every digit took a cycle |
|---|---|---|---|---|---|
| ResNet-18 3x3 | 576 | 3164 | 13926 | 2.41 | 2316 |
| GPT-2 projection | 768 | 935 | 3978 | 2.44 | 771 |
| MobileNetV3 pointwise | 960 | 1303 | 5849 | 2.43 | 963 |

The ResNet-18 run computes 16 x 16 outputs; the other two compute 8 x 8.
The stalls more than cancel the roughly 40 % of digits that are skipped. With
this crossbar, the design is therefore slower on such data than a schedule
that spends a cycle on every digit. Buffering, banks with more ports, or a
finer synchronisation would be needed to get the speed-up the idea promises;
none of these is built. The arithmetic results are exact in all cases.

Layout the host must write, for `K = 512*dks`, `KQ = K/4`:

```
l = k / KQ,  r = k % KQ,  j = r / (4*dks),  off = (r % (4*dks)) / 4,  i = r % 4
A bank l*MP+j, word m*dks + off,            byte i  = A[m][k]
B bank l*MP+j, word nt*dks*4 + off*4 + i,   byte n  = B[k][nt*NP + n]
```

A shorter K is padded with zeros. Zero digits cost no PE cycles, but each
padded A word still costs one fetch cycle.

## The PE group (`pe`, `cppg`, `compressor_6_2`, `pe_group`, `pe_array`)

A PE is a candidate generator (`cppg`: `B`, `2B`, `-B`, `-2B`, 10 bits
wide) and a multiplexer steered by the digit.

The four partial products of a group, together with the group's carry-save
accumulator `acc_s` and `acc_c`, are six 32-bit vectors. A 6:2 compressor
built from four 3:2 rows (plain full adders, no carry chain) reduces them to
a new sum and carry, which are registered. There is no carry-propagate adder
and no shifter inside the array.

Slots with no valid digit, for example a front end that has finished or
stalled, enter as digit 0.

When a pass ends, `clear` copies `acc_s`/`acc_c` into capture registers for
the SIMD core and restarts the accumulator from zero. The next pass can
start in the following cycle.

## Synchronisation and the SIMD core (`sync_ctrl`, `simd_core`)

`sync_ctrl` runs three nested loops:

1. row tiles `mt`;
2. column tiles `nt`;
3. bit weights `bw = 0..3`.

For each `(mt, nt, bw)` it starts all 128 front ends. It then waits until
every one has finished; `sync_wait` is high while some have finished and
others have not. Only then does it issue `clear`. If the SIMD core is still
busy with the previous pass, it also waits; `simd_stall` is high then.

The SIMD core handles `V` outputs per cycle. For each output it computes
`acc_s + acc_c`, shifts the result left by `2*bw`, and adds it into a C tile
register; at `bw = 0` it loads instead of adding. In the `bw = 3` pass each
finished output leaves on the result stream with its global row and column.

The paper sizes this unit so that it keeps up with the array (about
`MP*NP/KT` outputs per cycle for a pass of `KT` cycles). `V` is therefore a
parameter, and a stall signal covers the case where it does not keep up.

## Interface and timing (`tpe_opt4e`)

Sequence of one run:

1. Fill the banks through `a_wr_*` and `b_wr_*`, one word per cycle, in the
   layout above.
2. Set `cfg_m_tiles = M/32`, `cfg_n_tiles = N/32` and `cfg_dks = K/512`.
3. Pulse `start`. `busy` stays high until the last result has left.
4. Results appear on `c_valid[V]`, `c_row[V]`, `c_col[V]` and `c_data[V]` during
   the last pass of each tile. Each element of C appears exactly once.
5. `done` pulses for one cycle at the end.

All state is reset by the active-low asynchronous `rst_n`, except storage
that is written before it is read: the memories and the C tile register.
A single clock drives the whole design.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=F` at the end and has a cycle-count watchdog.

The end-to-end testbench `tpe_opt4e_tb` runs at a reduced size: 4 x 4
groups, 2 and 4 tiles, K = 64 or 128, random and 90 % sparse A. It
compares every element of C with a reference product and checks that each
element is delivered exactly once. It also bounds the cycle count from the
per-pass work and the refused reads. Finally it counts how often each
mechanism happened and fails if any never did:

- skipped zero digits;
- dropped all-zero words;
- bank conflicts;
- sync waits;
- SIMD stalls;
- finished tiles.

`tpe_opt4e_workload_tb` runs the layer sizes of the table above. A is
drawn from a normal distribution, and K is zero-padded to a multiple of 128
(a MobileNetV3 depthwise layer with K = 9 is included as well). The test
prints the measured digit density and cycle counts.

`tpe_opt4e_full_tb` runs the top with every parameter at its default: one
32 x 32 x 512 product, all 1024 outputs checked. Its Verilator build takes
about five minutes on a typical machine; the simulation takes under a
second.

With plain Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl --top-module tpe_opt4e_tb \
    rtl/tpe_pkg.sv rtl/*.sv tb/tpe_opt4e_tb.sv
./obj_dir/Vtpe_opt4e_tb
```

(`tpe_pkg.sv` must come first. Duplicate file names on the command line are
ignored with a warning; alternatively list the files in dependency order.)

## Where this design departs from the paper or fills gaps

- **Digit rule and width:** see the encoder section. The rule follows the
  paper's printed examples, and gives the Booth-like digit histogram instead
  of the paper's EN-T table. The digit is 3 bits wide, not 2.
- **Mapping of the four PEs of a group:** the paper states that a group
  shares one accumulator but not which products its four PEs compute. Here
  they work on four quarters of K for the same output.
- **Bank conflicts:** these are real and measured, not absent, and on
  normally distributed data they cost more cycles than sparsity saves.
  Arbitration is fixed priority.
- **Memory word format, memory sizes, host ports and result stream:** own
  choices. K must be a multiple of 512.
- **Capture registers:** own addition, so the array and the SIMD core
  overlap.
- **Compressor width:** kept at 32 bits. The paper says the width shrinks
  but gives no number.
- **Not built:**
  - the earlier variants of the idea (OPT1, OPT2, OPT3, OPT4C), which the
    paper evaluates only on the way to OPT4E;
  - the comparison designs;
  - the physical IO ring;
  - any DMA that fills the banks.

## Known tool warnings

Verilator lint reports a few warnings; none of them is an error:

- an unused top carry bit in `csa32`, which is the carry out of the MSB;
- the unused accumulator outputs of the groups inside `pe_array`, where only
  the capture registers are read;
- an unused digit vector in `column_frontend`;
- a warning about the clock/reset use of the queue-depth assertion in
  `column_frontend`.

Each is noted in the opening comment of its file.
