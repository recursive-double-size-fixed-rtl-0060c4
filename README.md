# RecInt modular exponentiation core

This core computes `a = b^c mod n` for 512-bit unsigned operands. Its arithmetic treats a
wide integer the way a recursive software type would. A `RecInt<K>` is an integer of `2^K`
bits. It is stored as two halves of type `RecInt<K-1>`: a *High* half and a *Low* half,
with `x = High * 2^(2^(K-1)) + Low`. The recursion stops at the *limb*, `RecInt<LIMB_K>`,
which is one machine word (64 bits by default).

Each arithmetic unit here is a SystemVerilog module that instantiates two or more copies
of itself at `K-1`, until it reaches a limb-sized leaf. So one source file describes an
adder, a comparator or a multiplier of any power-of-two width. Because the word size is a
power of two, "mod 2^(2^K)" means keeping the Low half, and an exact division by
`2^(2^K)` means keeping the High half. These two facts make Montgomery multiplication
cheap, and the exponentiator is built on it.

The core is fixed-precision arithmetic for cryptographic primitives such as RSA, where
every operation is carried out modulo a power of two, as in machine-word arithmetic.

## Building blocks

| module | function | combinational / latency |
|---|---|---|
| `recint_add` | `{cout, a} = b + c + cin`. Low-half adder first, its carry into the High half. | combinational |
| `recint_cmp` | three-way compare (`CMP_LT`, `CMP_EQ`, `CMP_GT`). The High halves decide unless they are equal. | combinational |
| `recint_lmul` | complete product `b*c`, `2^(K+1)` bits | combinational |
| `recint_mul` | truncated product `b*c mod 2^(2^K)` | combinational |
| `recint_redc` | Montgomery reduction `T*R^-1 mod N` | 2 cycles, pipelined |
| `recint_montmul` | Montgomery product `a*b*R^-1 mod N` | 3 cycles, pipelined |
| `recint_nprime` | `N' = -N^-1 mod R` | `2K` cycles |
| `recint_r2` | `R^2 mod N` | `2*2^K` cycles |
| `recint_expmod` | top: `b^c mod n` | see below |

`recint_pkg` holds the default sizes (`K_DEFAULT = 9`, `LIMB_K_DEFAULT = 6`) and the
comparison result type.

### Complete and truncated multiplication

This is the most unusual part of the design. Write `b = bh*2^H + bl` and `c = ch*2^H + cl`,
with `H = 2^(K-1)`. Then:

* **Complete product** (`recint_lmul`): `b*c = bh*ch*2^(2H) + (bh*cl + bl*ch)*2^H + bl*cl`.
  This takes four complete half-size products. A leaf is one 64x64 -> 128-bit
  multiplication.
* **Truncated product** (`recint_mul`) keeps only the low `2H` bits. The `bh*ch` term falls
  entirely above that, so it is never formed. The two cross terms matter only modulo
  `2^H`. The result is therefore
  `a = bl*cl + ((bh*cl + bl*ch) mod 2^H) * 2^H`.
  That is one *complete* half-size product plus two *truncated* half-size products.

The saving compounds at each level. With 64-bit limbs, the count of 64x64 leaf multipliers
is:

| K (operand bits) | complete `C(K) = 4 C(K-1)` | truncated `T(K) = C(K-1) + 2 T(K-1)` |
|---|---|---|
| 6 (64)  | 1  | 1  |
| 7 (128) | 4  | 3  |
| 8 (256) | 16 | 10 |
| 9 (512) | 64 | 36 |

The partial products are summed with ordinary adders. A synthesis tool is free to map those
adders onto carry chains or compressor trees.

### Montgomery reduction and multiplication

For an odd modulus `N < R = 2^(2^K)`, and for `0 <= T < R*N`, reduction works as follows:

```
m = (T.Low * N') mod R          -- recint_mul (truncated)
t = (T + m*N) / R               -- recint_lmul (complete), then take the High half
r = t >= N ? t - N : t
```

Here `N' = -N^-1 mod R`, so `R*R^-1 - N*N' = 1`. The reduction uses exactly one truncated
and one complete `RecInt<K>` multiplication, and no division. In `recint_redc`, `T + m*N`
is formed as two `RecInt<K>` additions:

* Low halves: these always sum to `0 mod R`, so only their carry is kept. An assertion
  checks that the sum bits are zero.
* High halves, plus that carry.

`t` can reach `2N-1`, one bit more than `N`. `t >= N` holds when either the High-half
carry is set or the comparator `recint_cmp` finds the remaining `2^K` bits `>= N`. The
subtraction `t - N` is an addition of `~N + 1`. An assertion checks that the comparator
agrees with the carry of that subtraction.

* Stage 1 registers `m` together with `T` and `N`.
* Stage 2 registers `r`.

`recint_montmul` puts a complete multiplier and a register in front of `recint_redc`. If
`x_bar = x*R mod N` is the *Montgomery representation* of `x`, then the Montgomery product
of `a_bar` and `b_bar` is the representation of `a*b`. A chain of products can therefore
stay in that representation without any division.

### Exponentiation sequence

`recint_expmod` uses one `recint_montmul` for every product and does not overlap products.
After `start`, it runs these steps:

1. **Precompute.** `recint_nprime` and `recint_r2` run in parallel.
   * `N'` comes from the Newton iteration `x <- x(2 - N x) mod R`. It starts from
     `x = N`, which is already correct modulo 8. Each iteration takes two cycles on one
     truncated multiplier.
   * `R^2 mod N` comes from `2*2^K` modular doublings: one adder and one conditional
     subtraction per cycle.
2. `b_bar = MM(b, R^2 mod N)`. This also reduces a base `b >= n`.
3. `x = MM(1, R^2 mod N) = R mod n`, the Montgomery form of 1.
4. For each exponent bit, from bit `2^K-1` down to bit 0: `x = MM(x, x)`. If the bit is
   set, `x = MM(x, b_bar)`.
5. `a = MM(x, 1) = x*R^-1 mod n`, which leaves the Montgomery representation.

Each product takes 4 cycles: the operands are registered, then the multiplier takes 3
cycles. From the clock edge that samples `start` to the one that raises `done`, the
operation takes

```
2*2^K + 1 + 4*(3 + 2^K + popcount(c))   cycles
```

For 512-bit operands that is 3085 to 5133 cycles, and about 4100 for a random exponent.
The testbenches check this count exactly.

## Interface of the top (`recint_expmod`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; every register is rising-edge |
| `rst_n` | in | 1 | asynchronous active-low reset |
| `start` | in | 1 | starts an operation when `busy` is low; `b`, `c`, `n` are sampled on that edge |
| `b` | in | `2^K` | base (any value) |
| `c` | in | `2^K` | exponent |
| `n` | in | `2^K` | modulus: odd, `>= 1`. An assertion checks that it is odd |
| `busy` | out | 1 | operation in progress |
| `done` | out | 1 | one-cycle pulse; `a` is valid from then until the next `start` |
| `a` | out | `2^K` | `b^c mod n` |

Parameters:

* `K`: operands are `2^K` bits. The default is 9 (512 bits). Use 7 for 128 bits and 8 for
  256 bits.
* `LIMB_K`: limbs are `2^LIMB_K` bits. The default is 6 (64 bits).

The lower blocks take the same two parameters.

A smaller modulus can run on a wider core: `b^c mod n` does not depend on `R`. The
default 512-bit core therefore also serves 128- and 256-bit moduli, but it always scans
all `2^K` exponent bits.

## Where this design makes its own choices

These points follow the recursive arithmetic that the design implements:

* the recursive High/Low structure;
* the four-product complete multiplication;
* the one-complete-plus-two-truncated truncated multiplication;
* REDC with one truncated and one complete product, using Low for "mod R" and High for
  "divide by R";
* the exit from Montgomery form by a product with 1;
* the word sizes 128, 256 and 512 bits and the 64-bit limb.

The following are this design's own choices:

* **Microarchitecture.** All multipliers are combinational trees. The pipeline registers
  and the 4-cycle product schedule are fixed. There is a single shared Montgomery
  multiplier with no overlap between products.
* **Area and speed trade-off.** A reference implementation of this arithmetic on an FPGA
  traded area against operation rate by changing the schedule. That schedule was not
  published, so this RTL has one fixed point. The fully combinational multipliers make it
  a large, fast design. At K = 9 it has about 200 64x64 multipliers and about 11.8 k
  flip-flops.
* **Exponent width.** The exponent is always a full `2^K`-bit word. A limb-sized exponent
  is the same operation with the upper bits zero.
* **Exponentiation order.** The exponent is scanned left to right with square-and-multiply,
  over all bits. Leading zeros are not skipped.
* **Precomputation of `N'` and `R^2 mod n`.** Both are computed on chip. `N'` uses the
  Newton iteration and `R^2 mod n` uses bit-serial doubling.
* **Carries.** The carry is one bit, not a limb-sized value.
* **Subtraction.** It is done as addition of the complement. There is no separate
  subtractor module.
* **Reset and handshake.** Reset is asynchronous. The handshake is start/busy/done.
* **Modulus.** An odd modulus is required. Montgomery reduction needs `gcd(N, R) = 1`. An
  even `n` gives a wrong result, and the simulation assertion fires.

The following are not implemented:

* recursive (Burnikel-Ziegler) division;
* gcd, modular inverse and square root;
* the general-purpose modular add/sub/neg helpers of a software library.

The exponentiator does not need any of them.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench compares the module
against plain wide-integer arithmetic computed in the testbench: `*`, `%` and `+` on
`logic` vectors up to 1025 bits. It prints `TB_RESULT checks=N failures=M`. Each testbench
also has a cycle watchdog.

* `tb_recint_add`, `tb_recint_cmp`, `tb_recint_lmul` and `tb_recint_mul` run random and
  corner-case operands at 512 bits: all ones, carries across each limb boundary, and pairs
  that differ in one limb.
* `tb_recint_redc` and `tb_recint_montmul` stream one input per cycle, using full-size and
  short odd moduli, including the largest allowed `T`. They check `r < N` and
  `r*R = T (mod N)`. They also check the exact latency (2 and 3 cycles). `N'` for them is
  computed in the testbench by bitwise Hensel lifting, independently of `recint_nprime`.
  `tb_recint_redc` requires that the final subtraction was both taken and skipped.
* `tb_recint_nprime` checks `N*N' = -1 mod R`. `tb_recint_r2` checks `R^2 mod N`. Both
  also check their cycle count.
* `tb_recint_expmod` is the end-to-end test at the default parameters (512 bits). It runs
  these cases:
  * 512-, 256- and 128-bit moduli with full-length exponents;
  * a base far above the modulus;
  * a zero exponent;
  * an all-ones exponent;
  * modulus 1;
  * `2^100 mod 1000003`.

  It checks every result against a square-and-multiply reference and every operation
  time against the formula above. It counts these mechanisms and fails if any never
  occurs:
  * multiply steps;
  * square-only steps;
  * base reduction;
  * REDC with and without the final subtraction;
  * doublings with and without subtraction.
* `tb_recint_expmod_sizes` (with the helper `expmod_size_runner`) runs the core at K = 7
  (128 bits) and K = 8 (256 bits).

Run any testbench with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl \
    rtl/recint_pkg.sv tb/tb_recint_expmod.sv --top-module tb_recint_expmod -o sim
./obj_dir/sim
```

Replace both occurrences of `tb_recint_expmod` with the name of another testbench to run
it. The 512-bit end-to-end run builds in well under a minute and simulates 11
exponentiations in under a second.

## Changing the design

* **Other word sizes.** Set `K` on `recint_expmod`. Every unit resizes itself through the
  recursion.
* **Other limb widths.** Set `LIMB_K`: 5 for 32-bit limbs, 4 for 16 bits, and so on. This
  is useful to map leaves onto the DSP blocks of a target device.
* **Less area.** The obvious lever is the multipliers. The reduction's complete
  multiplication and the product's complete multiplication can share one `recint_lmul`,
  because the schedule never uses both at once. A deeper change is a leaf-serial
  multiplier that walks the same recursion over several cycles.
* **A new timing.** If the schedule changes, update the cycle formula in
  `tb_recint_expmod` and in `expmod_size_runner`.
