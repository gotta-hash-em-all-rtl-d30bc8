# Batched ZK-friendly hash engines over BN254: Rescue-Prime, Griffin, Reinforced Concrete

Hash functions built for zero-knowledge circuits (Rescue-Prime, Griffin,
Reinforced Concrete) are cheap inside a proof. Computed directly, they are
slow: every step is arithmetic modulo a 254-bit prime, and two of them need
`x^(1/5)`, which is an exponentiation by a 254-bit exponent. This RTL computes
the three permutations in hardware. It follows the architecture of
"Gotta Hash 'Em All! Speeding Up Hash Functions for Zero-Knowledge Proof
Applications" (HashEmAll). The structure comes from that paper. Every constant
the paper does not print is a choice made here, and the sections below mark
which is which.

The central idea is **batch interleaving**. A modular multiplier is a deep
pipeline. A single exponentiation cannot keep it busy, because every
square-and-multiply step needs the result of the step before. So each engine
works on a batch of 13 independent states. In each cycle it issues the next
operation of a different state. After 13 cycles the same state comes round
again, and by then its previous result has left the 4-stage pipeline. The
multipliers never stall, and no state waits for another. Everything else in
the design is a schedule of these 13-cycle "slots".

## Contents of `rtl/`

| file | what it is |
|---|---|
| `hash_pkg.sv` | field type `fe_t` (254 bits), modulus, exponents, MDS, constants, RC tables, enums |
| `modmul.sv` | pipelined Barrett modular multiplier, 4 cycles, tag carried along |
| `pow_map.sv` | batched square-and-multiply `x^e`, 1 or 2 multipliers |
| `rescue_prime_perm.sv` | Rescue-Prime permutation engine (3 `pow_map`s) |
| `griffin_perm.sv` | Griffin permutation engine (2 multipliers, own schedule) |
| `fast_div.sv` | division by a fixed small base through a reciprocal table |
| `rc_modmul.sv` | reconfigurable multiplier: MULT / DECOMPOSE / COMPOSE |
| `rc_sbox.sv` | chunk S-box lookup of Reinforced Concrete's Bars layer |
| `rc_perm.sv` | Reinforced Concrete permutation engine (3 `rc_modmul`s) |
| `sponge.sv` | sponge wrapper (absorb blocks, squeeze one element per lane) |
| `hashemall_top.sv` | the three hashes with their sponges, one message port, `sel` chooses |

Every engine has the same handshake. Pulse `start` with the batch on `x_i`,
which is captured on that cycle. `done_o` pulses once `y_o` holds the permuted
batch, and `y_o` keeps it until the next `start`. Control registers have an
asynchronous active-low reset. The data arrays are not reset: they are loaded
at `start`.

## Field and arithmetic

All values are elements of the BN254 scalar field,
p = `0x30644e72e131a029b85045b68181585d2833e84879b9709143e1f593f0000001`.

`modmul` computes `a*b mod p` with Barrett reduction, using
mu = floor(2^508 / p). The stages are: the 508-bit product; the quotient
estimate `((x >> 253) * mu) >> 255`; the remainder `x - q*p` (less than 3p);
then at most two subtractions of p. A tag of the user's width travels with
each operation. The engines use it to address the write-back:
`{destination register, state index}`. Operands must already be reduced. The
paper takes its multiplier from an earlier library and does not describe it.
The Barrett structure and the depth of 4 are this design's own.

Additions are done as `add_mod` (add, then subtract p once). The MDS matrix
used by all three hashes is circ(2,1,1):
`y_i = x0 + x1 + x2 + x_i`, which needs additions only.

## Power maps: `pow_map`

Forward map: `x^5`. Inverse map: `x^(1/5)`, where
1/5 = `0x26b6a528...8ccccccd` = 5^-1 mod (p-1), a 254-bit exponent with
136 set bits. The exponent is scanned from the least significant bit: if the
bit is set, `result <- result * base`; then `base <- base^2`; stop when the
remaining exponent is 0.

* **Two multipliers** (`NMUL = 2`, latency-optimised): the square and the
  conditional multiply both read the old `base`. They go to different
  multipliers in the same slot, so one exponent bit costs one slot.
* **One multiplier** (`NMUL = 1`, area-optimised): a set bit costs a multiply
  slot followed by a square slot.

Latency from `start` to `done_o` is `slots * NB + MODMUL_LAT + 2` cycles.
Slots are `bitlen(e)` with two multipliers and `bitlen(e) + popcount(e)` with
one. For `x^(1/5)` that is 254 or 390 slots.

## Rescue-Prime: `rescue_prime_perm`

The engine runs 14 rounds. Each round applies `x^5` to all three elements,
then MDS and three constants, then `x^(1/5)` to all three elements, then MDS
and three more constants. There is one `pow_map` per state lane, so
`NMUL = 2` gives the 6-multiplier latency variant and `NMUL = 1` the
3-multiplier area variant. After each power map, a pass of 13 cycles applies
the linear layer to one state per cycle.

## Griffin: `griffin_perm`

The permutation starts with one MDS. Then each of 14 rounds computes

    y0 = x0^(1/5)
    y1 = x1^5
    y2 = x2 * (L^2 + alpha*L + beta),  L = y0 + y1

followed by MDS and round constants. The last round adds no constants.

Only one element takes the expensive inverse map, so the engine has its own
schedule on two multipliers. Multiplier 0 squares the base in every slot.
Multiplier 1 multiplies the result when the exponent bit is 1. When the bit is
0, multiplier 1 would be idle, so it works through `x1^2`, `x1^4`, `x1^5`
instead; 1/5 has far more than three zero bits. The quadratic cannot start
before `y0` exists. It takes two slots: `L*L` and `alpha*L` in parallel, then
`x2 * (L^2 + alpha*L + beta)`. One linear slot follows. That gives
254 + 2 + 1 slots per round. An assertion checks that `x1^5` is complete
before the quadratic reads it.

## Reinforced Concrete: `rc_perm`, `rc_modmul`, `fast_div`, `rc_sbox`

The layer order is

    Concrete0 Bricks Concrete1 Bricks Concrete2 Bricks Concrete3
    Bars
    Concrete4 Bricks Concrete5 Bricks Concrete6 Bricks Concrete7

*Concrete* is MDS plus three constants, applied as a linear pass.

*Bricks* is `(x1^5, x2(x1^2 + a1 x1 + b1), x3(x2^2 + a2 x2 + b2))`. It takes
three slots on the three multipliers:
`{x1^2, x2^2, a1 x1}`, then `{x1^4, y2, a2 x2}`, then `{y1 = x1^4 * x1, -, y3}`.

*Bars* is the costly layer. Each element is written in the mixed radix of 27
bases s_i, with x = (...(z0*s1 + z1)*s2 + ...)*s26 + z26. Every chunk goes
through a small S-box, and the element is then rebuilt. The three
multipliers are reconfigurable (`rc_modmul`), and the engine switches their
mode per slot:

* **DECOMPOSE** (27 slots): `x -> (x div s_i, x mod s_i)`, from the least
  significant chunk upwards. Division uses `fast_div`. Its table holds
  ceil(2^508 / s_i), so `q = (x * recip) >> 508`, and `r = x - q*s_i` in a
  second stage. Rounding the reciprocal up makes the quotient exact for every
  x < 2^254. An assertion checks that `r < s_i`. On write-back each chunk
  passes `rc_sbox`.
* **COMPOSE** (27 slots): the Horner step `acc*s_i + z_i`. The partial sums
  stay far below p, so the product is only reduced modulo p at the last step.
* **MULT**: an ordinary `modmul`, used by Bricks.

All three modes have the same 4-cycle latency. Operations of different modes
can therefore follow each other on consecutive cycles, and results still come
back in order.

## Sponge and top level

`sponge` wraps any engine through a `perm_start / perm_x / perm_done /
perm_y` port. Each lane's state is `(rate0, rate1, capacity)` and starts at
zero. Each message block adds two field elements into the rate and starts one
permutation of the whole batch. After the block flagged `msg_last`, element 0
of each lane comes out as that lane's digest, and the state clears. Blocks
use a valid/ready handshake: `msg_ready` is low while a permutation runs.
Padding is the caller's job.

`hashemall_top` holds all three hashes, each with its own sponge:

| `sel` | engine(s) | lanes | multipliers |
|---|---|---|---|
| `HASH_RESCUE` | 1 x `rescue_prime_perm`, `RP_NMUL = 2` | 13 | 6 |
| `HASH_GRIFFIN` | `GR_NPIPE = 3` x `griffin_perm` in lock step | 39 | 6 |
| `HASH_RC` | `RC_NPIPE = 2` x `rc_perm` in lock step | 26 | 6 reconfigurable |

These defaults are the paper's latency-optimised variants. Setting
`RP_NMUL = 1`, `GR_NPIPE = 1` and `RC_NPIPE = 1` gives its area-optimised
variants, each with a batch of 13. `msg` and `digest` have 39 lanes; lanes
above the selected hash's batch are ignored on input and read 0 on output.
`sel` may only change while `busy` is low, and an assertion checks this.
There is no host interface: the paper leaves I/O out of its design and
measurements.

## Timing against the paper's figures

Cycle counts are measured in simulation. The times use the clock frequencies
the paper reports for each variant.

| variant | cycles / batch | batch | per hash | paper |
|---|---|---|---|---|
| Rescue-Prime, 6 mult. | 47,336 | 13 | 36.4 us @100.13 MHz | 36.5 us |
| Rescue-Prime, 3 mult. | 72,452 | 13 | 55.6 us @100.21 MHz | 56.04 us |
| Griffin, 2 mult. | 46,813 | 13 | 34.7 us @103.88 MHz | 34.7 us |
| Griffin, 3 x 2 mult. | 46,813 | 39 | 11.5 us @103.93 MHz | 11.57 us |
| Reinforced Concrete, 3 mult. | 1,042 | 13 | 0.80 us @99.95 MHz | 0.28 us |
| Reinforced Concrete, 2 x 3 mult. | 1,042 | 26 | 0.42 us @96.56 MHz | 0.145 us |

Rescue-Prime and Griffin come within a few percent of the paper's figures.
This supports the reading used here, that one pipeline processes a batch of
13. Reinforced Concrete is about 2.9 times slower. Here each Bars layer
decomposes and composes one chunk per slot, which takes 54 slots. Bricks and
Concrete alone already take 338 cycles per batch, and the paper's 0.28 us is
only about 364. So the paper's Bars must use a much faster decomposition than
the one described above. Its text does not say how, and this design does not
try to guess it.

## What is not the paper's

The architecture (field, state of 3, round counts, the layer sequences, the
1/2-multiplier power map, Griffin's reuse of the idle multiplier, the
reciprocal-table divider with a 2^508 scale, the three multiplier modes and
the parallel pipelines) follows the paper. The paper prints none of the
following; they are filled in here:

* **Round constants are placeholders.** `hash_pkg::gen_const` derives them
  from `(t^5 + k0) mod p`. The digests are therefore *not* the official
  Rescue-Prime / Griffin / Reinforced Concrete values. To get standard
  digests, replace `RP_C`, `GR_C` and `RC_C`. The Griffin coefficients
  (`GR_ALPHA = 3`, `GR_BETA = 5`) are placeholders too.
* The MDS matrix is circ(2,1,1) for all three hashes. Rescue-Prime's official
  matrix is different.
* Reinforced Concrete: the bases `RC_S`, the S-box threshold v = 659 with
  S(z) = z^(v-2) mod v, and the Bricks coefficients (1, 3, 2, 4) are not the
  paper's. The recomposed value is reduced mod p.
* d = 5 and the exponent 1/5 mod (p-1) are the usual choice for BN254. The
  paper only says d depends on the field.
* The sponge uses field addition, a rate of 2, a capacity of 1, one squeezed
  element and no padding. The paper's text says "XORed", but its figure draws
  an adder; in a prime field, addition is the meaningful choice.
* The square-and-multiply pseudo-code tests the exponent's "MSB" but shifts
  right. The LSB-first form the right shift implies is implemented.
* The paper says COMPOSE runs "three multipliers in parallel". Here that is
  read as one multiplier per state element, each doing one Horner step per
  slot. Splitting a single element across three multipliers would need no
  fewer multiplications per batch.

## Simulating

The testbenches are in `tb/`. Each one checks its block against the reference
models in `tb/tb_ref_pkg.sv`, which are written directly from the definitions:
products reduced with `%` on 508-bit integers, powers by a bit loop, Bars by
integer `/` and `%`. Each testbench prints
`TB_RESULT checks=N failures=M`. Where a latency is fixed, the cycle counts
are checked too.

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/hash_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_rc_perm.sv \
        --top-module tb_rc_perm
    ./obj_dir/Vtb_rc_perm

(List `hash_pkg.sv` first and only once.) `tb_hashemall_top` is the
end-to-end test at the default sizes. It hashes a two-block RC batch whose
second block is offered while the first is still being permuted, then a
Griffin batch of 39 lanes, a Rescue-Prime batch of 13 lanes and a second RC
batch. It checks all 39 digests each time and counts the handshake stalls,
mode switches and multi-block messages. It takes about 190,000 cycles, a few
seconds of simulation.

## Changing it

* Batch size: the `NB` parameter of each engine. It must exceed
  `MODMUL_LAT` (checked by an assertion in `pow_map`).
* Multiplier depth: `MODMUL_LAT` in `hash_pkg` is the latency `rc_modmul` and
  the engines assume. If the pipeline of `modmul` is deepened, change
  `MODMUL_LAT` to match and keep `NB > MODMUL_LAT`.
* Another field: change `P`, `MU` (floor(2^(2*254)/p), or rederive the
  Barrett shifts for a new width), the exponents and the RC bases.
