# Twisted Edwards point multiplier over a 256-bit prime field

This design computes Q = k·P, the scalar multiplication at the heart of elliptic-curve
public-key cryptography. The curve is a twisted Edwards curve
a·x² + y² = 1 + d·x²·y². The scalar k is 256 bits. The latency is fixed at
255 × 646 = 164,730 clock cycles of point arithmetic, whatever the key.

The architecture comes from a published FPGA accelerator for Edwards25519-style curves.
It has three main ideas:

* **One unified point formula.** The same circuit adds two points and doubles a point,
  so additions and doublings look the same from outside. That helps against simple
  power analysis.
* **A flat, parallel point unit.** The formula is spread over six levels of
  concurrently running field units: 13 multipliers, 1 squarer, 2 adders and 2
  subtractors. A point operation therefore takes only five multiplier latencies plus one
  cycle.
* **Two point units side by side.** One unit adds and the other doubles, for every key
  bit. Each key bit costs exactly one point-operation time. The sequence of operations
  does not depend on the key.

Everything is written as synthesizable SystemVerilog, from the modular adder up to the
point multiplier. The point multiplier, `edcpm`, is the top level.

## Hierarchy

```
edcpm                       point multiplier, two point units + key-driven routing
├── upo  (adding unit)      unified point operation, 646 cycles
│   ├── modmul × 14         modular multiplier (13 multiplications + 1 squaring), 129 cycles
│   │   ├── booth_mul       radix-4 Booth multiplier 256×256→512, 128 cycles
│   │   └── modred          fast reduction modulo p256, combinational
│   └── modaddsub × 4       combined modular adder/subtractor, 1 cycle
└── upo  (doubling unit)    same as above
edc_pkg                     widths, point type, modulus, curve constants
```

There are 28 modular multipliers in all. Synthesis of the top level gives about 32,700
flip-flops. Most of them are the 28 product registers and operand registers.

## The field: which prime

The arithmetic works modulo the NIST prime

    p256 = 2^256 − 2^224 + 2^192 + 2^96 − 1

This is the prime that the fast-reduction circuit below is built for. The curve
coefficients are the Edwards25519 ones, a = −1 and d = −121665/121666, both taken modulo
p256 (`edc_pkg::CURVE_A`, `edc_pkg::CURVE_D`).

The source article names Edwards25519, whose prime is 2^255 − 19. However, the reduction
algorithm and circuit it gives are the ones for p256. The two cannot both hold. This
design keeps the reduction hardware as described, so the whole field is GF(p256).

The resulting curve is not Edwards25519. Over p256, −1 is a non-square and d is a square.
The addition formula is therefore not complete on this curve. Rare input pairs exist
where Z3 = 0. For random scalars and base points this does not happen in practice.

To move to another prime, replace `modred` and the `P256` constant. `modaddsub` already
takes its modulus as a port.

## Modular addition and subtraction (`modaddsub`)

One unit does both operations:

* `sel = 1`: z = (x + y) mod p
* `sel = 0`: z = (x − y) mod p

It uses two adders:

* The first adder adds x to either y or ¬y. With a carry-in, ¬y gives x − y.
* The second adder adds −p (for addition) or +p (for subtraction) to that result.

Two comparisons pick the answer:

* Addition keeps x + y − p when x + y ≥ p.
* Subtraction keeps x − y when x ≥ y. Otherwise it takes x − y + p.

The result is registered when `en` is high, so an operation takes one cycle.

## Modular multiplication: Booth product, then fast reduction

### `booth_mul`: 128 cycles for a 512-bit product

The multiplier uses a classic right-shifting product register:

* The upper part is a signed accumulator.
* The lower 256 bits start out holding the multiplier. Product bits replace them as they
  shift in.
* One extra bit holds the multiplier bit most recently shifted out.

Each clock, the unit looks at three bits {b(2i+1), b(2i), b(2i−1)}. Radix-4 Booth
recoding turns them into a digit in {−2, −1, 0, +1, +2}:

| bits      | added to accumulator |
|-----------|----------------------|
| 000, 111  | 0                    |
| 001, 010  | +B                   |
| 011       | +2B                  |
| 100       | −2B                  |
| 101, 110  | −B                   |

After each addition, the whole register shifts right by two bits. The upper part shifts
arithmetically. After 128 steps the register holds the product.

**The unsigned correction.** 128 Booth digits read a 256-bit multiplier as a *signed*
number. Its top bit then weighs −2^255 instead of +2^255. Field elements up to p256 − 1
often have that bit set. So on the last step, when the top multiplier bit is 1, the unit
also adds 4B. At that weight, 4B equals the missing 2^256·B. This costs one more adder
input on the last step only, and no extra cycle.

To make the multiplier and the reduction fit in 129 cycles, the operands are loaded and
the first step is taken on the same clock edge that samples `start`.

### `modred`: fast reduction modulo p256, combinational

Split the 512-bit product into 32-bit words x15 … x0. Because 2^256 is congruent modulo
p256 to a short signed sum of powers of 2^32, the product is congruent to

    Sm = Sm1 + 2·Sm2 + 2·Sm3 + Sm4 + Sm5 − Sm6 − Sm7 − Sm8 − Sm9

Each Smj is a 256-bit number made by placing input words, or zeros, into eight word
slots. The table below lists the slots from the most significant word down:

| term | words                              |
|------|------------------------------------|
| Sm1  | x7 x6 x5 x4 x3 x2 x1 x0            |
| Sm2  | x15 x14 x13 x12 x11 0 0 0          |
| Sm3  | 0 x15 x14 x13 x12 0 0 0            |
| Sm4  | x15 x14 0 0 0 x10 x9 x8            |
| Sm5  | x8 x13 x15 x14 x13 x11 x10 x9      |
| Sm6  | x10 x8 0 0 0 x13 x12 x11           |
| Sm7  | x11 x9 0 0 x15 x14 x13 x12         |
| Sm8  | x12 0 x10 x9 x8 x15 x14 x13        |
| Sm9  | x13 0 x11 x10 x9 0 x15 x14         |

An adder tree forms Sm. Its partial sums are named Sm14, Sm23, Sm1234, Sm56, Sm78,
Sm5678 and Sm56789.

Sm is only congruent to the result, and it is far out of range:

* At most five positive terms, each below 2^256, plus a little: Sm < 6p.
* Four negative terms: Sm > −5p.

The unit therefore adds a bias of 5p. It then forms the ten candidates
Sm + 5p − k·p (k = 1 … 10) in parallel. A chain of multiplexers keeps the last candidate
that is still non-negative, which is the residue.

The published circuit shows only six subtracted multiples and does not handle a negative
Sm. That cannot cover the range above. A copy of this unit with six candidates fails its
testbench.

### `modmul`: 129 cycles

`modmul` chains the two units. The reduction result is registered on the clock after the
product is ready. The result is then valid 129 cycles after `start` and stays valid until
the next result replaces it. A squarer is this same unit with both inputs tied together.

## Unified point operation (`upo`)

Points are projective triplets (X : Y : Z), with x = X/Z and y = Y/Z. The sum of
(X1 : Y1 : Z1) and (X2 : Y2 : Z2) is computed as follows:

```
A  = Z1·Z2      B = A²         C1 = a·X1·X2    C2 = X1·Y2
D1 = Y1·Y2      D2 = X2·Y1     E  = d·C2·D2    F  = B − E     G = B + E
X3 = A·F·(C2 + D2)     Y3 = A·G·(D1 − C1)     Z3 = F·G
```

If both inputs are the same point, the same circuit doubles it.

The unit gives every operation its own field unit. The operations are grouped into levels
by their dependencies:

| level | operations (all concurrent)                     | cycles |
|-------|-------------------------------------------------|--------|
| 1     | Z1·Z2, X1·X2, X1·Y2, Y1·Y2, X2·Y1               | 129    |
| 2     | A², a·(X1X2), C2·D2                             | 129    |
| 3     | d·(C2D2)                                        | 129    |
| 4     | B − E, B + E, C2 + D2, D1 − C1                  | 1      |
| 5     | A·F, A·G                                        | 129    |
| 6     | AF·(C2+D2), AG·(D1−C1), F·G                     | 129    |

The total is 5 × 129 + 1 = 646 cycles.

Each level starts on the `done` pulse of the one before it. Three registers carry values
past a level:

* A is needed again at level 5.
* C2 + D2 and D1 − C1 are needed again at level 6.

Every multiplier holds its result until it produces the next one. Results therefore stay
put while later levels use them. The output triplet stays valid after `done` until the
next operation reaches level 6. A new operation may start in the same cycle that `done`
is high.

The inputs p1 and p2 are sampled only on the `start` clock. The curve constants a and d
must stay stable during the operation.

## Point multiplication (`edcpm`)

### The schedule

The two point units keep a pair of points R0 and R1 whose difference is always P. They
start as R0 = P and R1 = 2P. For each key bit below the top one, from the most
significant down:

| key bit | adding unit          | doubling unit    |
|---------|----------------------|------------------|
| 0       | R1 ← R0 + R1         | R0 ← 2·R0        |
| 1       | R0 ← R0 + R1         | R1 ← 2·R1        |

After the last bit, R0 = k·P.

Both units work on every bit, so the pattern of operations does not depend on the key.
This is the "double and add always" behaviour.

The schedule assumes that the top key bit is 1, as a double-and-add that starts from
T = P does. An assertion flags a start with a zero top bit.

The initial values P and 2P are both inputs. The caller supplies 2P precomputed, for
example by one pass of `upo`. This keeps the count at 255 point operations for 256 key
bits.

### The datapath

* **MUX1** chooses the operands of a step. On the first step it passes the precomputed
  P and 2P. On later steps it passes the routed results of the step before.
* **MUX2** routes the adding and doubling results into R0 and R1, under the key bit of
  the step that just finished.
* **A key-bit multiplexer** in front of the doubling unit picks which point it doubles.

R1 has no register of its own. Between steps, the two units hold their results in their
output registers. R0 is also copied into the Q registers, which drive the output `q`.

### Timing

`start` (while idle) samples the key, P and 2P. The first pair of point operations
starts in the same clock. Each later pair starts in the clock where the previous pair
finishes, so there is no idle cycle between steps:

    (256 − 1) × 646 = 164,730 cycles of point operations

The Q registers load on the last of those cycles. `done` rises 164,731 cycles after
`start`.

The result is projective. Converting it to affine coordinates needs one field inversion,
or an exponentiation with the same multiplier. That conversion is left to the user.

### Interface

| port    | dir | width    | meaning                                           |
|---------|-----|----------|---------------------------------------------------|
| clk     | in  | 1        | clock                                             |
| rst_n   | in  | 1        | asynchronous active-low reset                     |
| start   | in  | 1        | begin a multiplication (ignored while busy)       |
| key     | in  | KEY_BITS | scalar k, top bit must be 1                       |
| p_in    | in  | 3×256    | base point P as `point_t` {x, y, z}               |
| p2_in   | in  | 3×256    | 2P, precomputed                                   |
| busy    | out | 1        | multiplication in progress                        |
| done    | out | 1        | one-cycle pulse, `q` valid                        |
| q       | out | 3×256    | k·P, projective, held until the next start        |

`KEY_BITS` defaults to 256. Smaller values are handy for quick simulations. The latency
is always (KEY_BITS − 1) × 646 + 1 cycles.

## Latency summary

| operation                 | cycles                   |
|---------------------------|--------------------------|
| modular add / subtract    | 1                        |
| Booth product             | 128                      |
| modular multiply / square | 129                      |
| unified point operation   | 646                      |
| point multiplication      | 164,730 (+1 output register) |

The source reports 117.8 MHz on a Virtex-5 for this structure. That gives 1.4 ms per
256-bit point multiplication. No timing closure has been done on this RTL. The
Booth step (a 262-bit add) and the combinational reduction (an adder tree plus ten
264-bit subtractions) are the long paths.

## Where this RTL departs from the published description

Points where the published description is incomplete or contradicts itself, and what was
done here:

* **Prime.** The reduction circuit is for p256, while the curve is named over
  2^255 − 19. This design uses p256 throughout (see above).
* **Booth algorithm.** The printed loop shifts by one bit per step and reads bits
  i, i+1, i+2. The text says two bits per cycle and 128 cycles. This design uses the
  standard two-bit step, and adds the unsigned correction on the last step.
* **Reduction range.** The design uses a 5p bias and ten candidate multiples instead of
  the six drawn.
* **Negation in the adder trees.** The inverters in the drawings are given a +1 carry-in
  here, to make them two's-complement negation.
* **Point multiplication schedule.** The printed algorithm is a sequential double-and-add.
  The stated cycle count, the two units in the block diagram and the "double and add
  always" wording are only consistent with the parallel two-point schedule used here.
* **Comparator.** The block diagram has a comparator between the adding unit's input and
  the doubling unit's output, driving MUX1. Its meaning is not given, so it is not built.
  The controller drives MUX1 instead.
* **Output register.** This adds one cycle to the published 164,730.
* **Not built.** The coordinate conversion (field inversion) and anything above the point
  multiplier (protocols, key handling).

## Simulating

Every block has a self-checking testbench in `tb/`. They share `tb/edc_ref_pkg.sv`, which
computes the field and curve operations straight from their definitions, with 512-bit
`%`. Each testbench prints `TB_RESULT checks=N failures=M` and finishes. Each has a
watchdog.

| testbench        | what it checks                                                         |
|------------------|------------------------------------------------------------------------|
| tb_modaddsub     | 1,000+ additions/subtractions incl. 0, 1, p−1, values near p; 1-cycle result, hold |
| tb_booth_mul     | products incl. all-ones and top-bit-set operands; exactly 128 cycles   |
| tb_modred        | 6,000 inputs incl. extreme term sums, multiples of p, (p−1)²           |
| tb_modmul        | residues and squares; exactly 129 cycles                               |
| tb_upo           | closed-form sum on random triplets; doublings and additions of curve points stay on the curve; 646 cycles; d = −121665/121666 |
| tb_edcpm         | whole design, 8-bit keys; k·P matches a double-and-add reference as an affine point; both key-bit routings, the precomputed start and an ignored start while busy counted |
| tb_edcpm_full    | default parameters: two 256-bit multiplications, 164,731 cycles each   |

The test base point has affine x = 5. Its y comes from a square root modulo p256. It is
scaled by a random Z in each test.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/edc_pkg.sv tb/edc_ref_pkg.sv tb/tb_edcpm_full.sv \
    --top-module tb_edcpm_full -o sim
./obj_dir/sim
```

Replace the testbench name as needed. Verilator finds the other modules in `rtl/` by
file name.

`tb_edcpm_full` runs in well under a minute. Building the top level takes about half a
minute, because there are 28 multiplier instances.
