# Count2Multiply control unit: high-radix counting inside a DRAM subarray

Count2Multiply computes `Y = X · Z` with the binary (or bit-sliced integer)
matrix `Z` kept in DRAM. Each row of `Z` is one DRAM row and acts as a mask;
each column of the subarray holds one counter of `Y`. For every element `X_i`
the memory runs a short program of bulk bitwise row operations that adds `X_i`
to every counter whose bit in mask row `Z_i` is 1. No data leaves the array;
all counters of a row update at once.

The counters are not binary. Each digit is an `n`-bit Johnson counter (JC),
radix `2n`. Adding one to a JC digit shifts its bits up by one position and
feeds the inverted top bit back into the bottom. That is a pure permutation
of rows plus one NOT. It needs no carry chain inside the digit, which suits
the memory's operations: row copy, three-row majority, and NOT through
dual-contact cells. Carries between digits are the costly part. Most of this
design is about when to issue them.

This RTL is the control unit that turns "add `x` under mask row `m`" into the
stream of memory commands. It does not model the DRAM array as hardware. The
array is analog, Ambit-style, and is provided only as a behavioural model for
simulation.

## The memory primitives the unit drives

Commands go out as `cim_cmd_t {op, src, dst}` on a valid/ready port:

* `AAP src, dst`: open `src`, then open `dst`. Every row opened by `dst` takes
  the sensed value. This is a copy.
* `AP a`: open `a`. When `a` names three rows, the sense amplifiers settle to
  their bitwise majority, and all three rows are overwritten with it.

Addresses come in three groups:

* **B-group**: sixteen addresses `B0..B15` that open one, two or three of six
  compute rows. These are `T0..T3`, plus `DCC0` and `DCC1`, which are
  dual-contact rows with a true and a negated wordline.
* **C-group**: the constant rows `C0` (all zeros) and `C1` (all ones).
* **D-group**: plain data rows.

`B11` opens `{T0, T1, DCC0}`. This departs from the original Ambit map and is
what the inverted-feedback step needs. The full decode is in `c2m_pkg.sv` and
in the model. With a majority and a constant, AND and OR are free:
`MAJ(a, b, 0) = a & b` and `MAJ(a, b, 1) = a | b`.

## Row map

All rows below are D-group rows:

| rows | use |
|---|---|
| 0, 1 | θ0 and θ1: saved bits during a rotation |
| `2 + d·(n+1) + i`, for i < n | bit `i` of digit `d`. Bit 0 is the LSB, bit n−1 the MSB |
| `2 + d·(n+1) + n` | `O_next` of digit `d`: one pending carry or borrow |
| the rest | mask rows, chosen by the host |

At the defaults (n = 2, 32 digits) the counters take 98 rows. That leaves 926
mask rows in a 1024-row subarray.

## One digit update (`uprog_gen`)

Adding `k` to a digit rotates its bits by `k` positions. Bits that wrap around
the top come back inverted. Under a mask `m`, each destination bit becomes:

    b_i' = (m & src) | (~m & b_i)        src = b_{i-k} or ~b_{i-k+n}

Two seven-command templates compute this in place.

**Forward step** (`src` taken as is):

    AAP m,B8   AAP C0,B9   AAP src,B2   AP B12   AAP dst,B2   AAP B14,B3   AAP B15,dst

**Inverted step** (`src` complemented through the negated DCC0 wordline):

    AAP dst,B2 AAP m,B8    AAP C0,B9    AAP B14,B3 AAP src,B5 AP B11     AAP B15,dst

A masked unit increment therefore costs `7n` commands for the bits.

**Rotating in place without losing bits.** For a rotation by `k`, let `sh` be
the shift within the `n` positions. The positions split into `gcd(n, sh)`
cycles. Each cycle is walked from its top position downward, so that every
source is read before it is overwritten. Before the walk, the first bit of a
cycle is copied to θ0 (the cycle through the MSB) or θ1 (any other cycle
longer than one position). The last step of that cycle reads it back from
there.

The save of the MSB is always made, because the flag program needs the old
MSB. For radix 4 a job is at most 1 + 7n + 10 commands.

**Flag update.** The digit overflowed exactly when its MSB fell from 1 to 0,
either in a masked column or through a wrap by more than half the radix.
Four short programs cover the cases:

| case | update | commands |
|---|---|---|
| k ≤ n, increment | `O \|= θ0 & ~MSB'` | 6 |
| k > n, increment | `O \|= (θ0 \| ~MSB') & m` | 10 |
| decrements | the same programs with old and new MSB swapped; a borrow is MSB 0→1 | 6 or 10 |

`MSB'` is the new MSB. A unit increment costs `7n + 7` commands: 21 for
radix 4.

A decrement by `k` is run as an increment by `2n − k`. In a JC that is the
same permutation.

Interface: `start_valid/start_ready` with `dig_base`, `k`, `dir` and `mask`.
Then one command per accepted `cmd_ready`, and `done` one cycle after the
last.

## Rippling only when needed (`iarm_planner`)

The flag row lets a digit hold a value up to `4n − 1`: its own value plus one
pending `2n`. So the carry into the next digit can wait. A "ripple" of digit
`j` is a masked unit increment of digit `j+1`, using `O_j` as the mask,
followed by `AAP C0, O_j`.

The controller cannot read the counters, and each column has seen a different
subset of the inputs. So it keeps a bound `h[d]` per digit position that holds
for every column:

* Adding `x` to digit `d` raises `h[d]` by `x`. If `h[d] + x` would pass
  `4n − 1`, digit `d` is rippled first.
* If `d+1` is itself full, then `d+1` is rippled before `d`, and so on. The
  planner returns the top of that chain.
* A ripple of `j` clamps `h[j]` to `2n − 1` and adds 1 to `h[j+1]`. A carry out
  of the top digit is dropped. The counters are modulo `(2n)^D`.
* A flush ripples every digit whose bound exceeds `2n − 1`, lowest first. After
  it, all flags are clear and the counters read as plain JC digits.

**Where this departs from the source description.** There, the bound is a
virtual counter fed with every input and reduced by `2n` on each ripple, that
is, the column that saw every input. That is not safe under masks. A column
whose mask skipped earlier inputs can sit at `2n − 1` with its flag clear when
a ripple passes. The virtual digit then drops below it, and a later add can
overflow that column a second time while the flag is still set, so a carry is
lost.

Clamping to `2n − 1` instead is safe for every mask pattern. The planner
testbench shows the difference: with the subtract-`2n` rule it reports about
3000 failures over random masks. With the clamp, the worked example of
thirteen `+9` additions on `9999` in radix 10 takes 13 ripples. Rippling
every digit after every add would take 65.

## Signed inputs and direction changes

A negative `x`, or a negative bit slice, decrements. Pending flags mean
"carry" while incrementing and "borrow" while decrementing, so the two cannot
be mixed. Before the first update in the other direction, the controller
flushes. It then sets every bound to `2n − 1`, since a flushed digit is at
most that far from either end.

This design does not allocate a sign row. A negative total therefore reads as
its radix complement modulo `(2n)^D`, which for 64-bit capacity is the usual
two's-complement value.

After a flush, the sign is the top digit's MSB: a JC digit is at least `n`
exactly when its MSB is set. ReLU uses that row as the sign. Each counter row
`r` becomes `r & ~sign` in four commands:

    AAP r,B0   AAP sign,B5   AAP C0,B1   AAP B11,r

The sign row itself is processed last. This is valid while results stay
below half the capacity in magnitude.

## The top (`c2m_ctrl`)

Requests use a valid/ready handshake:

* `REQ_CLEAR`: copies `C0` into every counter and flag row.
* `REQ_ACC`: takes `x` (signed, `XW` bits), `shift` and `neg` for a
  bit-sliced weight `±2^shift`, and `mask` (a D-group row).
* `REQ_FLUSH`: resolves all pending flags.
* `REQ_ADDC`: adds a second counter array, stored in the subarray in the same
  row layout starting at row `mask`, to the counters (see below).
* `REQ_COPY`: flushes, then copies every counter row to the rows starting at
  `mask`, one row copy each. `COPY` followed by `ADDC` from the copy doubles
  the counters. Repeating the pair `i` times shifts left by `i`.
* `REQ_RELU`: flushes, then zeroes every negative counter (see below).

For an ACC, `radix_converter` turns `|x| << shift` into base-`2n` digits. The
FSM walks the non-zero digits from least significant up. For each digit it
asks the planner for ripples, runs them, then starts `uprog_gen` for the
digit. Zero inputs and zero digits issue nothing.

Status outputs count commands, adds, ripples, skipped zero digits and
direction switches. Commands are not timed. Expanding AAP/AP into ACT/PRE
with tRAS/tRP/tFAW belongs to the DRAM command scheduler downstream.

| parameter | default | meaning |
|---|---|---|
| `N_BITS` | 2 | bits per JC digit (radix 4) |
| `DIGITS` | 32 | digits per counter: 4^32 = 2^64 capacity |
| `XW` | 8 | signed input width |
| `MAX_SHIFT` | 7 | largest bit-slice weight 2^7 (own choice) |
| `ROWS` | 1024 | rows per subarray |
| `THETA0_ROW`, `THETA1_ROW`, `CNT_BASE` | 0, 1, 2 | row map (own choice) |

At the defaults, generic yosys synthesis gives about 1600 cells and 417
flip-flop bits.

## Adding one counter array to another (`jc_add_mask`)

Partial results of different subarrays, or of different passes, must be
summed in memory. To add counter array C2 to the counters, each C2 digit of
value `v` is turned into `2n` mask rows, each of which is 1 in a column for
exactly `v` of them. Each mask then drives one masked unit increment of the
matching counter digit. The masks come from the digit's own bits:

    steps 0..n−1   (bits MSB down to LSB):  b | MSB
    steps n..2n−1  (bits LSB up to MSB):   ~b & MSB

For `v ≤ n`, the first pass yields the `v` set bits and the second yields
nothing. For `v > n`, the first pass is all ones (`n`) and the second adds
the `v − n` cleared low bits.

Each mask costs four commands into the θ1 row: copy `b` and `MSB` to two
compute rows, add a constant, and take the majority. θ1 is free at that
moment, because a unit increment saves only into θ0. Each unit increment
goes through the planner as an add of 1, so ripples are placed exactly as
for inputs. A full addition at the defaults is 32 × 4 × (4 + 21) = 3200
commands plus ripples.

The published description of the second pass carries the last first-pass
mask (`LSB | MSB`) into it. That would add `n` rather than `v` for
`0 < v < n`. The MSB is used in both passes here. C2 must have no pending
flags.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=… failures=…`.

* `tb_radix_converter`: every 8-bit input, every shift and both signs, for
  radix 4 and radix 10, against a plain digit loop.
* `tb_uprog_gen`: radix 4, 8 and 10 (one, two and prime-length cycles). Every
  `k`, both directions, random digits, flags and masks on 64 columns of the
  model. It checks the digits, the flags and the exact command count per job
  (`saves + 7n + 6` or `+ 10`).
* `tb_iarm_planner`: a shadow of 32 columns with random masks (radix 10, 5 digits). It checks that
  no column ever exceeds the planner's bound or `4n − 1`, that the value is
  exact after every flush, and the 13-ripple example above.
* `tb_jc_add_mask`: radix 4, 8 and 10 on the model. For random digits it
  checks every mask row against the digit values, checks that each column
  sees exactly `v` ones, and checks four commands per mask.
* `tb_c2m_ctrl`: end to end, reduced to 8 digits, 64 columns and 128 rows.
  It runs signed vector × binary matrix, bit-sliced integer weights, a long
  positive run (ripples must stay below adds), a wrap below zero, and
  counter-array additions. The additions run on top of pending flags and
  after a decrement. It also runs two shift-lefts and a ReLU on counters of
  both signs. It checks
  the 21-command unit increment. It counts every mechanism and fails if any
  never occurred: ripples, direction switches, skipped digits, the long flag
  program, clears, flushes with pending flags, and ripples during counter
  addition.
* `tb_c2m_full`: the top at its default parameters, with a model of
  1024 × 8192 bits (one 1 kB row per chip). It runs a complete accumulation
  and flush, then a counter-array addition, then a ReLU. It checks all 8192
  counters after each step.

To simulate with plain Verilator, list the package first. For example:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb \
      rtl/c2m_pkg.sv tb/jc_ref_pkg.sv tb/tb_c2m_ctrl.sv --top-module tb_c2m_ctrl
    ./obj_dir/Vtb_c2m_ctrl

## What is not here

* **ECC-protected counting.** Each masking AND would be wrapped into an XOR
  (`IR1 = a|b`, `IR2 = a&b`, `FR = IR1 & ~IR2`), so that the memory's parity
  check catches majority faults, with recomputation on failure. This is not
  implemented. The exact protected command listing is not available, and the
  parity check lives in the DRAM's ECC logic.
* **Splitting across subarrays.** Large workloads do not fit one subarray.
  LLaMA-sized GEMV/GEMM have `K` = 8192–28672 mask rows against 926 free.
  Counter addition combines arrays within one subarray. Moving partial
  counters between subarrays is not built.
* **Overflow-detection cost.** The original text puts it at "six AAP
  operations (4 RC and 3 MAJ3)", which does not add up. The program here uses
  six commands and keeps the stated `7n + 7` total.
