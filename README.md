# Large-number modular multiplication on SRAM compute-in-memory MAC macros

Public-key schemes such as ECC and RSA, and the zero-knowledge-proof and
homomorphic-encryption systems built on them, spend most of their time on
modular multiplication of 256- to 2048-bit numbers, `R = A*B mod M`. This RTL
computes it with Barrett's reduction. Each of the three large multiplications
is cut into 8-bit x 8-bit digit products and run on SRAM compute-in-memory
(CiM) macros that perform multiply-and-accumulate (MAC) operations.

The main idea is this. In the schoolbook product of two digit strings, all
digit pairs of the same weight form one *column*, and a column is a dot
product. If one factor (B) is stored as 32 8-bit words in a row of a 64 x 256
SRAM macro, the macro can compute a 32-term dot product of that row with 32
8-bit inputs in one cycle. Feeding it the right shifted window of the other
factor (A) produces one column per cycle. A small carry accumulator then
assembles the columns into the full product.

The design follows the LaMoS architecture (Li et al., "LaMoS: Enabling
Efficient Large Number Modular Multiplication through SRAM-based CiM
Acceleration"). The paper gives the mapping, the block diagram and cycle
counts; this RTL fills in everything it leaves open. The section "Departures
and additions" below lists each such choice. The defaults are the paper's
evaluated configuration: two macros, used for every operand width from 256
to 2048 bits. Here the width is chosen per operation, in steps of 256 bits,
on hardware built for the widest operand. Every cycle count the paper
prints (104 cycles at 256 bits, 3485 at 2048 bits) comes out exactly.

## 1. The arithmetic

Inputs: `A`, `B`, `M` of `n` bits, with `2^(n-1) < M < 2^n` and `A, B < M`.
The reciprocal `M' = floor(2^(2n) / M)` is computed by the host and supplied
with the operands. M is usually fixed for a whole application, so M' is
computed once.

| step | operation | hardware |
|---|---|---|
| 1 | `C = A * B` (2n bits) | CiM multiplication, result to the C buffer |
| 2 | `q = floor(C / 2^(n-1))` (n+1 bits), `u = q * M'` | shift (wiring), CiM multiplication, result to the u buffer |
| 3 | `E = floor(u / 2^(n+1))` (< 2^n) | shift (wiring) |
| 4 | `P = E * M` | CiM multiplication |
| 5 | `T = C - P`, then `R = T`, `T-M` or `T-2M` | cascaded subtractors and a mux |

E underestimates the true quotient by at most 2. Therefore `0 <= T < 3M`, and
only the low `n+2` bits of C and P enter the subtraction.

**The (n+1)th bit.** Both `q` and `M'` are `n+1` bits wide, because
`2^n < M' < 2^(n+1)` for M in the allowed range. A macro row slice, however,
holds `n` bits. The macros therefore multiply only the low parts,
`q_lo * M'_lo`. The missing partial products are added in one extra cycle
after the u product is complete:
`u = q_lo*M'_lo + 2^n * (q_top*M'_lo + m_top*q_lo + q_top*m_top*2^n)`.
The paper does not discuss this point.

## 2. One multiplication on one macro

Write the factors as digit strings, `A = sum a_i 2^(8i)` and
`B = sum b_j 2^(8j)`, with `T = n/8` digits each. Column `r` of the product is
`V_r = sum_j a_(r-j) * b_j`, and `A*B = sum_r V_r * 2^(8r)` for
`r = 0 .. 2T-2`.

B is stored in the macro with word `b_j` in lane `j`. In the cycle that
computes column `r`, lane `j` receives `a_(r-j)`, or 0 when the index falls
outside `0..T-1`:

```
           lane: 31 30 ...  2   1   0
cycle r=0  :      0  0 ...  0   0  a0
cycle r=1  :      0  0 ...  0  a0  a1
cycle r=2  :      0  0 ... a0  a1  a2
   ...
cycle r=31 :     a0 a1 ... a29 a30 a31
cycle r=32 :     a1 a2 ... a30 a31  0
   ...
cycle r=62 :    a31  0 ...  0   0   0
```

Each `V_r` is at most `32 * 255 * 255`, which fits 21 bits. Columns `r` and
`r+1` differ in weight by exactly `2^8`, so the low 8 bits of
`V_r + carry` are final product bits. The rest is carried into the next
column:

```
  sum   = V_r + temp          (temp = carry from column r-1, 0 for r = 0)
  result[8r+7 : 8r] = sum[7:0]
  temp  = sum >> 8
```

A 256 x 256-bit product thus takes one macro 63 useful cycles (64 in this
RTL, see section 3). It needs only a narrow adder and a small temp register.

## 3. Several macros and workload grouping

**Parallel macros.** All K macros hold the same B. In one cycle macro `k`
computes column `r+k`. The *macro adder tree* forms
`V_r + V_(r+1)*2^8 + ... + V_(r+K-1)*2^(8(K-1))`, and the accumulator writes
8K final bits per cycle.

**Operands wider than one row.** For `n > 256` the stored factor spans
`S = n/256` rows ("slices"). Slice `s` holds digits `32s .. 32s+31`. The work
of one multiplication is a grid:

* the `2T` columns are cut into `2S` **bands** of 32 columns each;
* each band meets each of the `S` slices;
* the pair (band g, slice s) is a **workload group**. Lane `j` of a group sees
  streamed digit `r - 32s - j`.

Many groups contain nothing but zero inputs. Group (g, s) has a non-zero
digit exactly when `0 <= g - s <= S`. The controller skips all other groups,
which is the paper's workload-grouping optimisation. That leaves
`G = S(S+1)` groups of `32/K` cycles each:

| n | S | groups kept / all | cycles per multiplication, K = 2 |
|---|---|---|---|
| 256 | 1 | 2 / 2 | 32 |
| 512 | 2 | 6 / 8 | 96 |
| 1024 | 4 | 20 / 32 | 320 |
| 2048 | 8 | 72 / 128 | 1152 |

Groups of the same band write the same output columns. The controller runs
them back to back, slices in increasing order. The accumulator's **band
buffer** keeps one partial sum per slot (one entry per batch of K columns).
The first group of a band writes it, middle groups add to it, and the last
group adds its own sum and passes the total to the carry adder. The carry
chain therefore still sees every column exactly once, in order, and grouping
costs no extra cycles. For `n = 256` each band has one group and the buffer
is unused.

For 256 bits on one macro, band 1 includes column 63, which is all zero, so
a multiplication takes 64 cycles instead of 63. This keeps the schedule
uniform and matches the paper's total of 200 cycles for a single macro.

## 4. Datapath

```
  a,b,m,mp ──► operand_mux ─(A | C>>(n-1) | u>>(n+1))─► input_shift_array
                 │  (A buffer, B/M/M' staging,                │ K x 32 digits
                 │   write-driver data)                       ▼
                 └──── wr_data ─────────────────────► cim_macro x K  (rows: B, M', M)
                                                              │ K x 21 bits
                                                              ▼
                                                      macro_adder_tree
                                                              ▼
                                         group_accumulator (band buffer, carry adder,
                                                            temp and result registers)
                                                              │ product
                                                              ▼
                            distributor ── C buffer, u buffer (+ top-bit fix), P
                                                              ▼
                                                      final_subtractors ──► r
  lamos_controller: row writes, group schedule, phase, fix, subtract
```

| module | role |
|---|---|
| `lamos_pkg` | shared constants (macro geometry, 21-bit MAC width), phase enum, accumulator-control struct |
| `cim_macro` | functional model of a 64 x 256 CiM MAC macro: row array, write port, 32 multipliers, adder; registered output |
| `input_shift_array` | barrel shift of the streamed operand into a window of 32+K-1 digits, then a fixed shift per macro |
| `macro_adder_tree` | weighted sum of the K macro results |
| `group_accumulator` | band buffer, carry adder, temp register, 2n-bit result register |
| `operand_mux` | A buffer, operand selection per phase (each shift is a mux of fixed shifts, one per width), write-driver data |
| `distributor` | C buffer, u buffer with the top-bit completion, P register |
| `final_subtractors` | `T = C - P`, two cascaded subtractions of M, result mux, result register |
| `lamos_controller` | state machine and group schedule |
| `lamos_top` | wiring; parameters `N` (widest operand, bits) and `K` (macros) |

Macro rows hold the three stored factors. With `S_max = N/256`, slice `s`
of B is row `s`, slice `s` of the low n bits of M' is row `S_max+s`, and
slice `s` of M is row `2*S_max+s`. All macros are written together, one row
per cycle, and only the `S` slices of the running width are written.

**Operand width at run time.** Each operation carries `nslices = n/256`
(1 to `N/256`). The controller uses it for the number of row writes, bands
and groups. The operand mux and the distributor use it to pick among
`N/256` fixed versions of each shift (`>> n-1`, `>> n+1`, `<< n`) and to
force digits above `n` to zero. The accumulator clears its whole result
register on the first batch of each multiplication, so product bits above
`2n` left from a wider operation read as zero. The subtractors need no
change: `T = C - P` is below `2^(n+2)`, so the low `N+2` bits of the
difference are exact for every `n`. A narrow operation on wide hardware
takes exactly as many cycles as on hardware of its own width.

## 5. Schedule and latency

One operation, counted from the clock edge that accepts `start` to the edge
that raises `done`:

| cycles | state | what happens |
|---|---|---|
| 3S | WRITE | B, M', M written into the macros |
| L | MUL | `C = A*B` |
| 1 | DRAIN | last macro results accumulated; C captured in the C buffer at that edge |
| L | MUL | `u = q_lo*M'_lo` |
| 1 | DRAIN | u captured |
| 1 | FIX | top-bit completion of u |
| L | MUL | `P = E*M` |
| 1 | DRAIN | P captured |
| 1 | SUB | final subtraction, result registered |

The total is `3S + 3L + 5`, with `L = S(S+1)*32/K`. The macro has a one-cycle
latency, so the accumulator control travels through a matching register in
the controller.

| n | K | cycles (this RTL, simulated) | paper |
|---|---|---|---|
| 256 | 2 | 104 | 104 (comparison table and ablation figure) |
| 256 | 1 | 200 | 200 |
| 512 | 2 | 299 | 299 |
| 512 | 1 | 587 | 587 |
| 1024 | 2 | 977 | 977 |
| 1024 | 1 | 1937 | 1937 |
| 2048 | 2 | 3485 | about 3.5k (plot), below 9,000 ns at 400 MHz |
| 256 | 4 | 56 | plotted only |
| 256 | 8 | 32 | 32 |

The paper does not say how its cycle counts split up. The formula above
reproduces all of its printed values, and the RTL's schedule is built to
meet it.

## 6. Interface of `lamos_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `start` | in | 1 | sampled while `ready`; operands are captured on that edge |
| `ready` | out | 1 | idle; `start` is ignored while low |
| `nslices` | in | clog2(N/256+1) | width of this operation, `n = 256*nslices`; sampled with `start` |
| `a`, `b` | in | N | factors, `< m` |
| `m` | in | N | modulus, `2^(n-1) < m < 2^n` |
| `mp` | in | N+1 | `floor(2^(2n) / m)` |
| `r` | out | N | result; holds until the next result |
| `done` | out | 1 | one-cycle pulse when `r` is new |

Bits of `a`, `b`, `m` above `n`, and of `mp` above `n+1`, must be zero.
`ready` returns in the cycle `done` is high, so operations can run back to
back. Inputs that break the preconditions give a wrong `r`; they never hang
the design.

Parameters: `N` (default 2048) must be a multiple of 256, and
`3*N/256 <= 64` so that the three factors fit the 64 macro rows (N up to
5376). `K` (default 2) must divide 32. Both set the hardware; the width of
each operation is `nslices`.

## 7. Departures and additions

These follow from gaps or inconsistencies in the paper; each is this
design's choice:

* **Quotient estimate.** The paper's algorithm multiplies
  `floor(C / 2^(n-1))` by M'. Its prose says "the lower n+1 bits of C". The
  algorithm, which is standard Barrett, is implemented.
* **Group size.** The prose describes groups of "32 rows by 128 bits". The
  figure and the numbers (20 of 32 groups kept for 1024 bits, 37.5 % saved,
  160 cycles on four macros) only work for 32 rows by 32 digits (256 bits,
  one macro row). The latter is implemented.
* **n+1-bit factors** are handled by the fix cycle of section 1.
* **Combining groups that share output columns** (the band buffer) is not
  described in the paper.
* **Single-macro 256-bit multiplication** takes 64 cycles, not the 63 the
  text mentions (section 3).
* **Width selection.** The paper claims any bit width and evaluates one
  configuration from 256 to 2048 bits, but does not say how the width is
  chosen. Here it is an input sampled with `start` (steps of 256 bits, up to
  the parameter `N`).
* **Handshake, reset, row layout, operand staging and the state machine** are
  not described in the paper.
* **The CiM macro** is a published silicon macro that the paper reuses. Here
  it is modelled functionally: an array, 32 multipliers and an adder, with
  an assumed one-cycle registered output. It computes the same numbers. Its
  area, power and analog behaviour are not modelled.
* **Timing.** The paper synthesised at 400 MHz in 28 nm. This RTL is not
  timing-closed. The barrel shifter in front of the macros, the 2n-bit
  completion adder and the final subtractors are long combinational paths
  that a real implementation would pipeline or split.
* **Not included:** the non-grouped ("naive") mapping, which the paper only
  uses for comparison, and the computation of M', which is done off-chip.

## 8. Verification

Each module has a self-checking testbench in `tb/`, at the default
parameters unless noted. Each prints `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `cim_macro_tb` | MAC results against a software dot product, including the 21-bit maximum; one-cycle latency |
| `input_shift_array_tb` | every lane of every macro for all bases of a 2048-bit operand, with 2 and 4 macros |
| `macro_adder_tree_tb` | weighted sums for K = 1, 2, 4, 8 |
| `group_accumulator_tb` | full grouped products up to 2048 x 2048 bits from real column sums, against direct multiplication; narrower products in between check the clearing of the upper part |
| `operand_mux_tb` | operand of each phase at every width of the 2048-bit hardware, top bits, write-driver slices |
| `distributor_tb` | buffer routing; exact `q*M'` after the fix cycle for all top-bit combinations, at every width |
| `final_subtractors_tb` | the T, T-M and T-2M cases, widths 256 to 2048 bits |
| `lamos_controller_tb` | the whole schedule of 2048-, 256-, 512-, 1024- and 768-bit operations (3485, 104, 299, 977, 590 cycles), cycle by cycle, against a schedule derived by brute force |
| `lamos_top_tb` | end to end with two macros: n = 512 (299 cycles), n = 256 (104 cycles), and 1024-bit hardware with a random width per operation. Results are checked against `(A*B) mod M`, latencies against the formula. It runs until all three correction cases, both values of the q top bit, the band buffer and a change of width have been exercised |
| `lamos_full_tb` | `lamos_top` at its default parameters (2048-bit hardware, two macros), 12 operations at widths from 256 to 2048 bits, with the paper's cycle counts 104 / 299 / 977 / 3485 |
| `lamos_workloads_tb` | the evaluated points: 256 to 2048 bits on the default hardware, 1, 4 and 8 macros; results and exact cycle counts |

The reference values are computed with wide integer arithmetic in the
testbench. Every testbench has a watchdog. Run any of them with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/lamos_pkg.sv \
    tb/lamos_top_tb.sv --top-module lamos_top_tb
./obj_dir/Vlamos_top_tb
```

`tb/lamos_tb_core.sv` is the reusable end-to-end checker behind the top-level
and workload testbenches. It takes `N`, `K`, the range of widths and
optionally a fixed expected latency as parameters.

How far to trust it: the arithmetic of the whole design is checked against
an independent reference at all sizes the paper evaluates, and the cycle
counts match the paper's printed numbers. What is not verified: anything
physical (the macro's circuits, timing at 400 MHz, area), and behaviour
outside the input preconditions.
