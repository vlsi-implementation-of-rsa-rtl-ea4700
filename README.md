# RSA exponentiation with Vedic multiplication and straight division

RSA encryption and decryption both reduce to one operation, `a^b mod n`:
encryption computes `L = M^J mod N` with the public key `(N, J)`, decryption
computes `M = L^I mod N` with the private key `(N, I)`. This design computes
that operation with a square-and-multiply loop whose modular products are
formed by two arithmetic units taken from Vedic mathematics:

* an **overlay multiplier**, which cuts both operands into 4-bit groups and
  builds the product from "vertical and crosswise" sums of 4x4 sub-products,
  all of which are formed in parallel;
* a **straight-division divider** (Dhvajanka, "division at sight"), which
  divides by the leading digit of the divisor only and corrects each trial
  quotient digit with the rest of the divisor (the "flag").

The reference configuration is an 8x8 multiplier paired with a 16-bit by
16-bit divider. Text, modulus and residues are therefore 8 bits wide, and the
exponent is also 8 bits. The sizes are toy sizes. They show the structure;
they give no security.

## Hierarchy

```
rsa_core            square-and-multiply sequencer (clocked)
└── mod_mult        (x*y) mod n, combinational
    ├── overlay_mult #(N=8)      8x8 -> 16-bit product
    │   └── mul4x4 x4            4x4 crosswise cells
    └── vedic_divider #(N=16)    16/16 straight division with 4-bit head
                                 digit; remainder used
rsa_pkg             shared widths and the sequencer's state type
```

Key generation (choosing primes and computing `I = J^-1 mod K`) is not in
hardware. The keys are inputs of `rsa_core`.

## The exponentiation loop (`rsa_core`)

The engine walks the exponent from its top bit down:

```
l = 0; m = 1
for j = EXP_W-1 downto 0:
    l = 2l;    m = (m*m) mod n          -- SQUARE cycle
    if b[j]:   l = l+1; m = (m*a) mod n -- MULT cycle, only for set bits
```

One `mod_mult` serves both steps. Its second operand is `m` in SQUARE and the
latched text `a` in MULT. Each step takes one clock cycle. A run therefore takes
`EXP_W + popcount(b)` cycles: 8 to 16 cycles at the default size. `l`
rebuilds the exponent bit by bit. It is an output, and it equals `b` at the end.

Handshake: while the engine is idle or done, a cycle with `start` high latches
`a`, `b` and `n` and begins the loop. `busy` is high during the SQUARE and MULT
cycles. `start` is ignored while `busy` is high. Then `done` rises and holds,
with the result on `m`, until the next `start`. `rst_n` is asynchronous and
active low. `a` may be larger than `n`: the first product reduces it. The
engine needs `n > 0`. With `n = 1` the result is 0.

## The overlay multiplier (`overlay_mult`, `mul4x4`)

For `N`-bit operands (`N` a multiple of 4) there are `G = N/4` groups
`X(G-1)..X0` and `Y(G-1)..Y0`. Each pair `Xi*Yj` has its own `mul4x4`, so the
`G^2` sub-products are formed at the same time. Cross product `k` sums the
sub-products with `i + j = k`. For 16 bits these are

```
A = X0Y0                 E = X3Y1 + X1Y3 + X2Y2
B = X1Y0 + X0Y1          F = X3Y2 + X2Y3
C = X2Y0 + X0Y2 + X1Y1   G = X3Y3
D = X3Y0 + X0Y3 + X2Y1 + X1Y2
```

and the product is `sum(CP_k * 2^(4k))`. That final addition is written as a
plain sum of shifted terms; a synthesis tool chooses the adder structure.
Inside `mul4x4` the same crosswise rule is used at bit level. Column `c` adds
the bit products `a[i]&b[j]` with `i+j = c` plus the carry from column
`c-1`. It yields product bit `c` and passes the rest on as carry.

## The straight divider (`vedic_divider`)

This is the least familiar part of the design. In decimal, dividing by a
two-digit divisor `Y0 Y1`, the method proceeds one dividend digit at a time:

1. divide the running dividend `K` by the head digit `Y0` only. This gives a
   trial quotient digit `Z` and a remainder `C`;
2. **ADJUST**: while `C*10 + E < Y1*Z`, where `E` is the next dividend digit,
   lower `Z` by one and add `Y0` to `C`;
3. the next running dividend is `K = C*10 + E - Y1*Z`. After the last digit
   this value is the remainder.

Example: `35001 / 77 = 454` with remainder `43`.

Because `K*10 + E - Z*(10*Y0 + Y1) = C*10 + E - Y1*Z`, step 3 is exactly the
usual partial remainder. ADJUST lowers the head-only estimate to the largest
digit that leaves it non-negative, so every digit is exact.

The binary version used here:

* **Head and flag.** The head digit `Y0` is the top 4 bits of the divisor.
  Four bits is the same grouping the multiplier uses. The flag `Y1` is the
  remaining `N-4` bits, taken as one number, so
  `divisor = Y0 * 2^(N-4) + Y1`.
* **One step.** The dividend is brought down 4 bits at a time. With running
  remainder `R` and next dividend digit `E`, a step forms `T = R*16 + E` and
  splits it into `K = T >> (N-4)` (at most 8 bits) and the low part `L`. Then:
  - `Z = K / Y0` and `C = K % Y0`: a short division by the head digit alone;
  - ADJUST: while `C*2^(N-4) + L < Y1*Z`, decrement `Z` and add `Y0` to `C`;
  - the new running remainder is `C*2^(N-4) + L - Y1*Z`, which equals
    `T - Z*divisor`.
* **Normalisation.** The divisor is shifted left until its top bit is set,
  which puts the head digit in `[8, 15]`. The dividend is shifted by the same
  amount into `2N` bits, which is 8 digits for `N = 16`, so there are 8 steps.
  The shift leaves the quotient unchanged. The remainder is shifted back at
  the end. Without this step a small divisor would have a zero head digit.
* **Bounded ADJUST.** With a normalised head, the trial digit overshoots the
  true one by less than `16 / Y0 <= 2`. ADJUST is therefore two conditional
  corrections, not a loop. Both cases, one correction and two, occur.
* **Head division.** `K / Y0` divides an 8-bit value by a 4-bit digit: a
  table-sized operation, the part the method leaves to be done "at sight". It
  is written with `/` and `%`.
* **Division by zero** gives an all-ones quotient and returns the dividend as
  the remainder.

Why not two 8-bit digits, which would copy the decimal table more literally?
In the RSA datapath the modulus has only 8 significant bits. After
normalisation inside the 16-bit divider, its lower half would always be zero.
The flag would vanish and ADJUST would never act. With a 4-bit head, any
modulus with a set bit below its top four bits has a non-zero flag, for
example 143 and 221.

The whole divider is combinational: 8 identical digit stages in series.
Each stage is a small head division, two compare-and-correct steps and a
multiply-subtract with the flag.

## Departures and own choices

The description this RTL follows contains a few slips. Here is how each was
resolved:

* The ADJUST procedure is written with the two divisor digits swapped: it
  compares against `Y0*Z` and adds `Y1`. The worked example has
  `Y0 = Y1 = 7` and cannot tell the two forms apart. Only "compare against
  `Y1*Z`, add `Y0`" keeps the next running dividend correct, so that form is
  used.
* The final remainder is written as using the first quotient digit. The
  worked example uses the last one, and the RTL does the same.
* The worked example's intermediate steps are garbled, but its result
  (`454 r 43`) is right. The testbench checks that result.

The following are this design's own choices, because no source gives them:

* the mapping of decimal digits to a 4-bit head and a multi-bit flag, and the
  normalisation;
* the circuit for the head division;
* the adder used for the multiplier's final sum;
* the 4x4 cell's internals;
* one modular product per clock, the start/busy/done handshake, the reset,
  and the 8-bit exponent;
* joining multiplier and divider into `mod_mult`: the 16-bit product is the
  dividend, and the zero-extended modulus is the divisor.

Performance figures for the original FPGA implementation (gate delay on a
Xilinx Spartan part, against restoring and non-restoring dividers) are not
reproduced. This RTL has not been taken through FPGA synthesis or timing.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `overlay_mult` | `N` | 8 | operand width, a multiple of 4 |
| `vedic_divider` | `N`, `DW` | 16, 4 | dividend/divisor width; head-digit width (`N > DW`, `DW` divides `2N`) |
| `mod_mult` | `W` | 8 | residue width (uses an `N=W` multiplier, `N=2W` divider) |
| `rsa_core` | `W`, `EXP_W` | 8, 8 | residue and exponent widths (`EXP_W >= 2`) |

The defaults live in `rsa_pkg`. Larger `W` keeps the same structure, but
toy-size RSA stays toy-size.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

* `tb_mul4x4`: all 256 operand pairs.
* `tb_overlay_mult`: all 65536 pairs at `N = 8`, plus corner and 20000
  random pairs at `N = 16`.
* `tb_vedic_divider`: the worked example `35001/77`, divisors of every length
  from 1 to 16 bits, divisors with a small head and a large flag, division by
  zero, and random pairs. It compares against `/` and `%`. It counts the
  operand pairs whose trial digit needed one correction and those that
  needed two, and fails if either count is zero. An 8-bit
  instance is checked over all 65536 operand pairs.
* `tb_mod_mult`: all `x` with every third `y` for six moduli, plus random
  triples. It also confirms that, with 8-bit moduli, the divider's
  trial digits really are corrected. That happens for about 40% of the
  products tried.
* `tb_rsa_core`: the end-to-end test at the default sizes. It encrypts and
  decrypts every message for three key pairs, `(n, e, d) = (143, 7, 103)`,
  `(221, 5, 77)` and `(15, 3, 3)`, then runs random triples. It checks
  each result against a software model, checks the round trip and the
  rebuilt exponent, and checks the latency of `EXP_W + popcount(b)` cycles.
  It counts squarings, multiplies, skipped multiplies, starts ignored while
  busy, encryptions and decryptions, and fails if any count is zero.

Simulate one with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rsa_core \
    -y rtl -y tb +libext+.sv rtl/rsa_pkg.sv tb/tb_rsa_core.sv
./obj_dir/Vtb_rsa_core
```

Each testbench finishes in seconds.
