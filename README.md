# MeNTT in SystemVerilog: a number-theoretic transform computed inside one SRAM bank

Lattice cryptography (Ring-LWE and its relatives) spends most of its time multiplying
polynomials of a few hundred to a few thousand coefficients modulo a prime `q`. The
usual fast route is the number-theoretic transform (NTT): transform both operands,
multiply them coefficient by coefficient, transform back. An NTT of `n` points is
`log2(n)` stages of `n/2` butterflies, and in a conventional design most of the energy
goes into carrying coefficients between a memory and a few butterfly units.

This design does the opposite. The whole polynomial lives in one SRAM bank, and
**every column of the bank is a butterfly unit**. A column stores two coefficients
(`A` and `B`), a twiddle factor `W` and a scratchpad, one bit per row. The controller
raises the same word lines in all columns at once, a small block of logic under each
column turns what the bit lines sense into one bit of a sum, and the bit is written
back to the bank. Arithmetic is bit-serial (one bit per clock) but word-parallel:
1024 columns do 1024 modular operations side by side. Between stages a fixed
wiring, the same for every stage, moves the results to the columns that need them
next.

The RTL here is a complete, synthesizable model of that accelerator:

- the bank;
- the column logic;
- the bit-serial comparators;
- the inter-column router;
- the sequencer;
- testbenches that run transforms and polynomial products at the full size, 1024
  columns and 32-bit coefficients, against software references.

The sense amplifiers are modelled by their logical function. The two parts of the
surrounding system are left outside the top level: the noise sampler and the system
memory. The system memory is reached through two row ports.

## 1. One column

Every column holds the same layout. `N` is the coefficient width (`NBITS`, 32 by
default); words are stored LSB at the lowest row.

| rows              | name | contents                                        |
|-------------------|------|-------------------------------------------------|
| `0 .. N-1`        | A    | first butterfly operand (even address)          |
| `N .. 2N-1`       | B    | second operand (odd address)                    |
| `2N .. 3N-1`      | W    | twiddle factor, then the product `B*W`          |
| `3N .. 4N`        | S0   | `A + B*W` (N+1 bits)                            |
| `4N+1 .. 5N+1`    | S1   | `-B*W`, then `A - B*W` (N+1 bits)               |

That is `5N+2` rows: 162 rows for 32-bit coefficients, the bank size of the
original design (162 x 1024 cells).

A bit width below `N` can be chosen at run time (`nbits`). The same row bases are
used, and only the low `nbits` rows of each field take part.

## 2. Arithmetic from two word lines

When two word lines are raised together, the bit line `BL` of a column stays high
only if both cells hold 1. `BLB` stays high only if both hold 0. So each column
sees `a AND b` and `a NOR b` in one read (`pim_sram_array`).

From these two signals `column_periph` forms how many ones the two cells hold:

```
ones = AND + (NOT NOR)
```

When only one row is raised, `ones` is simply that row's bit. There is also a
complement mode, where `BLB` of a single row gives `NOT x`. With a carry-in of 1,
this is how `-x` is formed.

Each clock the column adds three things to `ones`:

- the carry, 0 to 2, or minus the borrow, 0 or 1, from the previous bit;
- one bit of a reduction constant (`0`, `q`, `2q` or `4q`), added or subtracted;
- nothing else: the low bit of the result is written back, the rest becomes the
  next carry or borrow.

A per-column **Tag** flip-flop controls a switch between the port-A cell and the
bit line. When Tag is 0, the port-A cell cannot pull the bit line down. The
multiplier uses this to add `W` only when the current multiplier bit is 1.

### Bit-serial comparison

`bitserial_cmp` decides `x >= c` while `x` streams past, LSB first:

- where the bits of `x` and `c` differ, the bit of `x` becomes the answer;
- where they are equal, the previous answer is kept;
- the first bit starts from "equal", so equal words give `>=`.

Each column has two comparators:

- one against `q`;
- one against `2q`. Bit `j` of `2q` is bit `j-1` of `q`, broadcast by the
  sequencer.

At the end of a pass, `SUB_LOAD` copies the two answers into the overflow
flip-flops `ovf1` and `ovf2`. These choose the constant used in the next pass.

## 3. Modular addition and subtraction

**Addition**, `S0 = (A + Y) mod q`, takes `2(N+1)` cycles.

1. A trial pass of `N+1` bits computes `A + Y` without writing it. The comparator
   marks the columns where the sum is at least `q`.
2. The real pass computes `A + Y - q` in the marked columns and `A + Y` in the
   others. It writes the result to S0.

**Subtraction**, `S1 = (A - Y) mod q`, takes `3(N+1)` cycles.

1. Write `-Y` into S1, as the complement with a carry-in of 1 (two's complement,
   `N+1` bits).
2. A trial pass computes `A + S1`. Its sign bit (bit `N`) is the underflow flag.
3. The real pass computes `A + S1 + q` where there was underflow, and writes the
   result back over S1. Each bit is read and rewritten in the same cycle.

## 4. Modular multiplication: a sliding window

`W <- W * Y mod q` works through `Y` from the MSB down, by shift and add. It never
forms the double-width product: reduction is folded into every round.

Round `r` does the following:

1. **Tag load (1 cycle).** Bit `N-1-r` of `Y` is sensed and stored in Tag.
2. **Accumulate (N+2 cycles).** Every column computes

   ```
   psum' = 2*psum + Tag*W - k
   k = 4q if ovf2, 2q if ovf1 (and not ovf2), else 0
   ```

   The flags were taken from the previous round's `psum`: `ovf1` means
   `psum >= q`, `ovf2` means `psum >= 2q`. The comparators check the new `psum'`
   while it is written, so the flags for the next round are ready when the pass
   ends.

The invariant is `0 <= psum < 3q`.

- If `psum` is in `[2q, 3q)`, then `2*psum - 4q` is in `[0, 2q)`.
- If `psum` is in `[q, 2q)`, then `2*psum - 2q` is in `[0, 2q)`.
- If `psum` is below `q`, then `2*psum` is below `2q`.

Adding `W < q` keeps the result below `3q`. That is below `2^(N+2)`, so `N+2` bits
are enough for any `q < 2^N`, whatever its value.

After the last round, a final pass of `N` cycles subtracts `2q` (if `ovf2`), `q`
(if `ovf1`) or nothing, and writes the reduced product into W.

**The doubling is free.** The partial sum does not sit at a fixed address. It
lives in a window that slides down by one row per round, across the 2N+2 scratch
rows:

- in round `r`, bit `j` of `psum` is at row `S0 + N - 1 - r + j`;
- bit `j-1` of the old sum and bit `j` of the doubled new sum are therefore the
  same row.

Each cycle reads a row and rewrites it, and the shift costs no cycles. This relies
on the bank returning the old contents when a row is read and written in the same
cycle.

Cost: `N(N+3) + N = N^2 + 4N` cycles.

## 5. Moving data between stages

A butterfly stage pairs index `i` with index `i XOR 2^k` for a different `k` in
every stage. Wiring each column to the columns it needs, stage by stage, would need
a crossbar. The layout removes it.

**The layout.** In stage `p` (0-based), coefficient `i` of an `n = 2^L`-point
transform is stored at address `rotate_left_L(i, p+1)`.

- Address `2c` is the A word of column `c`.
- Address `2c+1` is the B word of column `c`.
- The pair a column holds differs only in index bit `L-1-p`, the bit that stage
  `p` works on. The rotation brings that bit to address bit 0.

**The move.** Going from stage `p` to stage `p+1` rotates every address by one
more bit. So the move between any two stages is the same: the word at address
`a` goes to address `rotate_left(a, 1)`. Solved for the receiving column `d`:

```
A of column d  <-  column (d >> 1),          sum (S0) if d even, difference (S1) if d odd
B of column d  <-  column (d >> 1) + n/4,    same choice
```

**Example, 8 points.** Address 4 (A of column 2) always goes to address 1 (B of
column 0), in every stage.

`inter_column_router` implements this wiring with two capture registers per column,
`D_OUT1` and `D_OUT2`. Each bit takes four cycles:

1. sense the S0 row and capture it into `D_OUT1`;
2. sense the S1 row and capture it into `D_OUT2`;
3. write the next A row;
4. write the next B row.

That is `4N` cycles per stage, independent of `n`.

The router supports every size up to `2*COLS` points. `log_n` selects where the
"upper half" starts (`n/4` columns further on). Columns at or above `n/2` do
nothing:

- their logic is frozen;
- their cells are never written;
- they keep their contents.

This stands in for column power gating.

After the last stage the rotation has gone all the way round. So coefficients rest
at `rotate_left(i, 1)` before and after every transform.

## 6. A transform and a polynomial product

**Stage sequence.** One NTT stage takes `N^2 + 14N + 5` cycles:

| step | what it does | cycles |
|---|---|---|
| LOADW | the twiddles arrive from the system memory, one row per cycle | `N` |
| MUL | `W = B*W` | `N^2 + 4N` |
| ADD | `S0 = A + W` (W now holds `B*W`) | `2(N+1)` |
| SUB | `S1 = A - W` | `3(N+1)` |
| ROUTE | move the results to the next stage's columns | `4N` |

**Order of the data.** The forward transform (`CMD_NTT`) takes coefficients in
natural order. It leaves `X[bitrev(i)]` at index `i`. The butterflies are
Cooley–Tukey, `A + W*B` and `A - W*B`.

**Twiddle for column `c` in stage `p`.** With `w` a primitive `n`-th root of unity
mod `q`:

```
w^((n >> (p+1)) * j)
j = bitrev_L(rotate_right_L(2c, p+1)) mod 2^p
```

For the inverse transform (`CMD_INTT`), use `w^-1` in place of `w`. The twiddles
are supplied by the system memory on request (`ext_*` ports). They are not
computed on chip.

**Polynomial product.** The testbench computes `c = a * s` in
`Z_q[x]/(x^n - 1)` like this:

1. Load `a` and run `NTT`.
2. Run `PWMUL`. It multiplies A and B, in place, by operand rows fetched from the
   system memory. These rows hold `n^-1 * NTT(s)`, computed ahead of time, so the
   final scaling by `n^-1` costs nothing.
3. Read the product and write it back in natural order through the host port.
4. Run `INTT`.
5. The result `c[bitrev(i)]` is at index `i`.

The inverse uses the same network and router as the forward transform. Because
the network needs natural-order input, step 3 is needed (see section 9).

## 7. Interfaces and timing

`mentt_top` has these parameters:

| parameter | default | meaning |
|---|---|---|
| `NBITS` | 32 | coefficient width |
| `COLS` | 1024 | columns; up to `2*COLS` points |
| `ROWS` | `5*NBITS+2` = 162 | rows of the bank |
| `LOG_AW` | 5 | width of `log_n` |
| `BIT_AW` | `clog2(NBITS+3)` = 6 | width of `nbits` |

**Command port.**

- Present `start` for one clock, with `cmd`, `q`, `nbits` and `log_n`, while
  `busy` is low.
- `busy` stays high until the single-cycle `done` pulse.
- Requirements: `q < 2^nbits`, operands below `q`, `2 <= log_n <= log2(2*COLS)`.
- Commands:

  | command | effect |
  |---|---|
  | `CMD_ADD` | `S0 = A+B` |
  | `CMD_SUB` | `S1 = A-B` |
  | `CMD_MUL` | `W = W*B` |
  | `CMD_NTT`, `CMD_INTT` | a whole transform |
  | `CMD_PWMUL` | pointwise multiply |

  `CMD_ADD`, `CMD_SUB` and `CMD_MUL` work column by column. They are mainly there
  for testing.

**Host row port.** This is the data-memory side, and it is usable only while idle.

- `host_wr` writes `host_wdata` into row `host_row`, in the columns set in
  `host_wmask`.
- `host_rd` senses a row. `host_rdata` holds it one cycle later.
- Each row carries one bit of every column.

**External row port.** This supplies twiddles and pointwise operands while busy.

- The sequencer raises `ext_req` with:
  - `ext_kind`: forward twiddle, inverse twiddle or pointwise operand;
  - `ext_stage`;
  - `ext_half`: A or B for pointwise;
  - `ext_bit`.
- The system memory must drive the requested row on `ext_row` in the same cycle.
- The row is written into W at the next rising edge.

**Debug outputs.** `col_ovf1` and `col_ovf2` expose the overflow flip-flops of
every column.

**Reset.** Reset is asynchronous and active low (`rst_n`). It clears:

- the sequencer;
- the column flip-flops;
- the host read register.

The bank itself is not reset. Write every row before reading it.

## 8. Cycle counts

The figures below are for one forward transform. They match the published ones to
within about 12% throughout.

| n | N | cycles (this RTL) | published figure (approx., read off a chart or table) |
|---|---|---|---|
| 128 | 14 | 2 779 | 3 050 |
| 256 | 14 | 3 176 | 3 500 (23 µs at 151 MHz) |
| 512 | 14 | 3 573 | 3 950 (26 µs) |
| 1024 | 14 | 3 970 | 4 400 (29 µs) |
| 1024 | 16 | 4 850 | 4 700 (34.3 µs) |
| 1024 | 20 | 6 850 | 6 250 |
| 1024 | 24 | 9 170 | 8 200 |
| 1024 | 28 | 11 810 | 10 900 |
| 1024 | 32 | 14 770 | 14 500 |
| 2048 | 32 | 16 247 | — |

- The multiplier is a little slower than `(N+1)^2`, which grows the gap at large N
  (section 9).
- At small N this design is slightly faster. The published counts may include
  overheads that are not described.
- Sizes above 2048 points need a wider bank (`COLS = n/2`). The RTL takes any
  power-of-two `COLS`.

## 9. Where this design departs from, or fills in, the original description

**Two points per column.** The original design is described as a 162 x 1024 bank
for 1024-point transforms, and also as having the array width equal to the maximum
number of points. Its data-flow figure, however, places an A and a B operand in
every column. This RTL follows the data-flow figure:

- the default bank holds up to 2048 points;
- a 1024-point transform uses 512 columns.

**Multiplier length.** Each round has one extra clock to load the Tag. The partial
sum is two bits wider than the operands, so that any `q < 2^N` works. The original
text instead requires one operand below `q/2` and uses `2q`. The published count
is `(N+1)^2`. Here it is `N^2 + 4N`.

**Final correction.** The last pass of the multiplier may subtract `2q` as well as
`q`, because the partial sum can reach `3q`. The original algorithm listing shows
only a subtraction of `q`.

**Subtraction.** The correction adds `q` after an underflow. For this, the column
adder accepts the constant on the adding side as well as on the subtracting side.
Carries of up to 2 are kept.

**Trial passes.** The trial passes of addition and subtraction do not write their
raw result: it is never used.

**Where `-B*W` is kept.** `-B*W` is kept in the second scratch half, not in W,
because it needs `N+1` bits.

**Comparator start value.** The bit-serial comparator starts from "greater or
equal". The original examples are consistent with this. No start value is stated
there.

**Ordering around the inverse transform.** This is the main functional gap. The
original states that the inverse transform uses the same mapping and routing. With
natural-order input and bit-reversed output, a second pass of the same network
needs a reorder.

The reason is in the first stage. The first stage of a radix-2 transform must
combine frequency components whose indices differ in the top bit. After the
forward transform these components sit at positions that differ in position bit
0. The fixed wiring pairs positions that differ in the top bit first. Bit
reversal is not a rotation, so the router cannot undo it. Here the host does that reorder once, between the pointwise
product and the inverse transform. That is `2N` row reads and `2N` row writes.

**The ring.** A bare `NTT -> PWMUL -> INTT` gives the cyclic product, in
`x^n - 1`. Ring-LWE uses `x^n + 1`. For that, the operands are twisted by powers
of a `2n`-th root `psi`, using three more `PWMUL` commands:

1. `a_i * psi^i` before the forward transform;
2. the twist of `s` folded into its precomputed operand;
3. `psi^-k` on the result.

`tb_mentt_workloads` runs this sequence. No single command chains it.

**Twiddles.** Twiddles and pointwise operands come from outside, one row per
cycle.

**Column power gating.** This is modelled as freezing the logic and masking the
writes of unused columns. No power model exists.

**Filled in here.** The following are this design's own choices, not taken from
the original:

- the sequencer's pass structure;
- the micro-operation encoding (`mentt_pkg::uop_t`);
- the host and external row ports;
- reset;
- run-time `nbits` and `log_n`.

## 10. Files

| file | contents |
|---|---|
| `rtl/mentt_pkg.sv` | shared types: micro-operation, reduction modes, commands, write sources |
| `rtl/pim_sram_array.sv` | the bank: dual-row AND/NOR read, Tag switch, masked row write |
| `rtl/bitserial_cmp.sv` | LSB-first `>=` comparator |
| `rtl/column_periph.sv` | near-memory logic of one column |
| `rtl/inter_column_router.sv` | stage-to-stage wiring with D_OUT1/D_OUT2 capture |
| `rtl/mentt_controller.sv` | sequencer: passes, row addresses, external requests |
| `rtl/mentt_top.sv` | the accelerator |

| testbench | what it checks |
|---|---|
| `tb/tb_bitserial_cmp.sv` | random and corner words against integer compare |
| `tb/tb_pim_sram_array.sv` | AND/NOR sensing, Tag switch, masked and same-cycle writes (small bank) |
| `tb/tb_column_periph.sv` | one column with its own memory model; addition, subtraction and multiplication for several 8-bit moduli, with cycle counts |
| `tb/tb_inter_column_router.sv` | routing against `rotate_left(a,1)` for every size |
| `tb/tb_mentt_controller.sv` | pass lengths, writes and fetches for 32-, 14- and 5-bit widths |
| `tb/tb_mentt_top.sv` | full-size (defaults), see below |
| `tb/tb_mentt_workloads.sv` | full-size runs at the evaluated sizes, see below |

`tb_mentt_top` runs at the default size. It checks:

- element-wise ADD, SUB and MUL on 1024 columns;
- a 16-point NTT, with a check that the gated columns are untouched;
- a 1024-point, 32-bit NTT against a direct transform;
- a pointwise product, then an INTT, with the result checked against a cyclic
  convolution.

It also counts each mechanism and fails if any never happened:

- overflow;
- underflow;
- `2q` and `4q` reduction;
- routing;
- forward and inverse twiddles;
- pointwise fetches;
- gated columns.

`tb_mentt_workloads` also runs at the default size:

- NTTs at `N = 14` for `n = 128 … 1024`, with `q = 12289`, against a direct
  transform;
- `n = 1024` at `N = 12 … 32`, with random moduli and twiddles, against a
  butterfly-network model;
- a 2048-point, 32-bit NTT over all columns;
- a product in `Z_q[x]/(x^n + 1)`, with `n = 1024` and `N = 14`, against a direct
  negacyclic convolution.

Every run checks its cycle count.

Every testbench prints `TB_RESULT checks=<n> failures=<m>`.

**Simulating with Verilator 5.** Run from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -j 4 -y rtl -y tb \
    rtl/mentt_pkg.sv tb/tb_mentt_top.sv --top-module tb_mentt_top
./obj_dir/Vtb_mentt_top
```

Replace `tb_mentt_top` with any other testbench name.

| testbench | build | run |
|---|---|---|
| `tb_mentt_top` | about 50 s | about 10 s |
| `tb_mentt_workloads` | about 25 s | about 30 s |
| block testbenches | a few seconds | a few seconds |

The simulator has two signal states. The testbenches initialise every row before
using it.

**Changing the design.**

- `NBITS` sets the row count through `ROWS = 5*NBITS+2`. `nbits` can then be
  anything up to `NBITS` at run time.
- `COLS` must be a power of two.
- The sequencer assumes the row map of section 1. If you move a field, update the
  base constants in `mentt_controller`.
