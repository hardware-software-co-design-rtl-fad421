# BIKE key generation and decapsulation accelerators for a CPU + small-FPGA co-design

BIKE is a post-quantum key-encapsulation mechanism built on QC-MDPC codes. Its three
operations are key generation, encapsulation and decapsulation. On an embedded SoC that pairs a
processor with a small FPGA, not all three fit in the programmable logic. The useful split is
to put in hardware the operations that gain the most per unit of area. For the largest device of
the Zynq-7000 family considered (Z-7020), that is **key generation and decapsulation in
hardware, encapsulation in software**. Encapsulation is short in software (about 15 ms against
330-460 ms for the other two on a 667 MHz Cortex-A9).

This RTL implements the hardware half of that split for BIKE at NIST security level 1:

* `keygen_accel` samples the private key (h0, h1) from SHAKE256(seed). It inverts h0 and
  produces the public key h = h1 · h0⁻¹.
* `decaps_accel` computes the syndrome and decodes it with a bit-flipping decoder. It recovers
  the message, re-derives the error to check the ciphertext, and outputs the shared key. A bad
  ciphertext gets a key derived from the secret σ (implicit rejection).
* `bike_hwsw_top` places the two side by side. The processor, the TRNG and the software
  encapsulation are outside; their signals are plain ports.

The smaller co-designs are subsets of this one. On a Z-7010 only key generation goes in
hardware; on a Z-7015 only decapsulation does.

## Code parameters and data layout

| symbol | meaning | default |
|---|---|---|
| `R` | circulant block length r (prime, 2 primitive mod r) | 12323 |
| `D` | ones in each of h0, h1 (w/2) | 71 |
| `T` | error weight t | 134 |
| `LEVELS` | Karatsuba recursion depth of the multiplier | 1 |
| `UNROLL` | carry-less multipliers per clock in `gf2x_mul` (unroll factor of the Comba loop) | 2 |
| `MAX_ITER` | decoder iteration cap | 20 |
| `THR_MUL/THR_ADD/THR_MIN` | decoder threshold, see below | 116974 / 226995732 / 36 |

r, d and t are the BIKE level-1 values. The first three live in `bike_pkg` and every module
takes them as parameters.

Every polynomial of degree below r is stored as `NW = poly_words(R, LEVELS)` 64-bit words.
Bit i sits in bit i mod 64 of word i/64. Bits from r up to 64·NW are always zero. NW is rounded
up to a multiple of 2^LEVELS so that Karatsuba can halve it; it is 194 at the defaults. The
2r-bit error vector is two such polynomials: e0 in words [0, NW), e1 in words [NW, 2·NW).
Polynomial buffers are plain arrays, written one word per clock through write ports and read
combinationally. A vendor flow would map the large ones to block RAM.

## Arithmetic in GF(2)[x]/(x^r − 1)

### Multiplier: Karatsuba unrolled over a Comba core (`gf2x_mul`)

This is the block that dominates key generation, and it is the least obvious one.

The base is a word-serial Comba, or product-scanning, multiplier. It produces the product
column by column. Column k is the XOR of `clmul(a[i], b[k−i])` over all valid i. The inner
loop over i is unrolled `UNROLL` times: each clock forms `UNROLL` 64×64 carry-less products
of one column and XORs them into the running column sum (default 2). The low 64 bits of the
column sum are the finished product word. The high 64 bits carry into the next column.

On top of the Comba core sit `LEVELS` layers of Karatsuba. Over GF(2), with a = a0 + xʰa1:

    a·b = L + xʰ(L + H + M) + x²ʰH,   L = a0b0,  H = a1b1,  M = (a0+a1)(b0+b1)

The recursion is unrolled instead of being run as nested calls:

* The operands are cut into 2^LEVELS chunks of NC = NW/2^LEVELS words.
* There are 3^LEVELS half-size products. Product t has one ternary digit per level: 0 takes the
  low half, 1 the high half, 2 the sum of both halves.
* Word w of product t's operand is the XOR of the chunks whose level bits match the digits.
  It is formed on the fly while the Comba loop reads it.
* Each finished column word is XORed into a 2·NW-word product memory at every offset the digits
  call for. Digit 0 places it at 0 and h, digit 1 at h and 2h, digit 2 at h, where h is that
  level's half size.
* For several levels the offset sets combine, and the same offset can be reached twice. Those
  contributions cancel, and the unit skips offsets reached an even number of times.

The reduction modulo x^r − 1 costs no cycles. The read port returns product word j (bits below
r) XOR the 64 product bits that start at bit r + 64j.

Latency is exactly `3^LEVELS · (1 + Σ_k ⌈n_k / UNROLL⌉)` cycles from start to done, where n_k
is the number of terms in column k (2·NC − 1 columns). With `UNROLL = 1` this is
`3^LEVELS · (NC² + 1)`. At the defaults (`LEVELS = 1`, `UNROLL = 2`) it is 14,262 cycles:

| LEVELS | UNROLL = 1 | UNROLL = 2 |
|---|---|---|
| 0 (plain Comba, NC = 193) | 37,250 | 18,722 |
| 1 (NC = 97) | 28,230 | 14,262 |
| 2 (NC = 49) | — | 11,034 |

Each extra level multiplies the cycle count by about 3/4. It adds chunk XORs in front of the
multiplier and offset logic behind it. Each step of unrolling adds one more 64×64 carry-less
multiplier and roughly divides the cycle count by the factor.

### Powers 2^k (`gf2x_pow2k`)

Squaring modulo x^r − 1 over GF(2) sends coefficient j to position 2j mod r. So k squarings are
a single permutation, j → j·2^k mod r. The unit first finds P = 2^k mod r with k modular
doublings. It then copies source bit j to destination bit j·P mod r, one bit per clock, keeping
the index by adding P modulo r. Latency: k + r + 1 cycles.

### Inversion (`gf2x_inv`)

The inverse is a⁻¹ = (a^(2^(r−2) − 1))². It is built with an Itoh–Tsujii chain. Start with
f = res = a. Then for i = 1 … ⌊log2(r−2)⌋:

    f   ← f · f^(2^(2^(i−1)))                    so that f = a^(2^(2^i) − 1)
    res ← res · f^(2^((r−2) mod 2^i))            only if bit i of r−2 is 1

The result is res². At r = 12323 this is 13 steps and 16 multiplications. The controller owns
the f and res buffers and drives an external multiplier and power unit through master ports.
Key generation reuses those same two units for h1·h0⁻¹.

The chain this is taken from ends with "f²". That is not the inverse. Only `res` accumulates
the exponent r − 2. This design returns res², and the testbench checks a·a⁻¹ = 1.

## Bit-flipping decoder (`bf_decoder`)

Input: the syndrome s = c0·h0 and the private blocks. It iterates while s ≠ 0, up to
`MAX_ITER` times:

1. **Threshold.** thr = max(⌊(|s|·THR_MUL + THR_ADD) / 2²⁴⌋, THR_MIN). At the defaults this is
   the level-1 rule max(⌊0.0069722·|s| + 13.530⌋, 36). |s| is kept as a running count.
2. **Counting.** For each of the 2r error positions j, upc_j counts the set syndrome bits at
   (j mod r + p) mod r, for the d positions p of h0 or h1. Every position is scored against the
   same syndrome. Positions with upc_j ≥ thr are marked in a flip map. This takes one parity
   check per clock, 2r·d cycles.
3. **Update.** The unit walks the flip map. For each marked j it toggles e′_j and the d
   syndrome bits of j. The result equals recomputing s from e′, at a fraction of the cost.

At the start the decoder extracts the supports of h0 and h1 from the dense blocks (2r cycles)
and counts |s| (NW cycles). At level 1 one iteration is about 1.78 M cycles. A typical decode
takes 3 iterations. `success` reports whether s reached zero; `iters` gives the count.

## Hashing and sampling

**`sha3_shake`** is one sponge around one `keccak_f1600` core. The core runs one round per
clock, 24 per permutation. The mode is chosen at `init`:

| mode | rate | pad byte |
|---|---|---|
| SHA3-384 | 13 lanes | 0x06 |
| SHAKE256 | 17 lanes | 0x1F |

Messages are whole 64-bit words, little-endian and never empty. Output is a valid/ready stream
of lanes, re-permuted every `rate` words. Each accelerator has exactly one sponge, shared by all
its hash and XOF uses.

**`poly_sampler`** draws a fixed-weight vector from a SHAKE256 stream:

* Each 64-bit word gives two 32-bit candidates, low half first.
* A candidate is masked to the next power of two above NBLK·r.
* It is dropped if out of range or already set. Otherwise it is set.
* Sampling stops after `WEIGHT` accepted positions. The rest of a half-used word is discarded.

Key generation samples h0 and then h1 from one SHAKE256(seed) stream. Decapsulation samples e
(weight t over 2r) from SHAKE256(m″).

## Key generation sequence (`keygen_accel`)

1. Absorb the 32-bit seed, zero-extended to one word, into SHAKE256.
2. Sample h0, then h1.
3. Invert h0.
4. Compute h = h1 · h0⁻¹.
5. Latch the 256-bit TRNG value σ.

At the defaults this takes **475,117 cycles** (4.8 ms at 100 MHz). Almost all of it is the 17
multiplications and 17 permutations. Read h0, h1 and h with `rd_sel` = 0, 1, 2 and σ on
`sigma`.

## Decapsulation sequence (`decaps_accel`)

Load h0 (`ld_sel` 0), h1 (1) and c0 (2) word by word. Set c1 = m′ and σ on their ports, then
pulse `start`.

1. s = h0 · c0.
2. Decode s to e′.
3. m″ = m′ ⊕ SHA3-384(e0′ ‖ e1′)[255:0].
4. e″ = sample(SHAKE256(m″)).
5. a = m″ if e″ = e′, else σ. `accepted` tells which.
6. K = SHA3-384(a ‖ c0 ‖ m′)[255:0], on `key`.

At the defaults one decapsulation with a 3-iteration decode takes **5,375,112 cycles**
(54 ms at 100 MHz).

The matching encapsulation, done in software, is: m random;
e = sample(SHAKE256(m)); c0 = e0 + e1·h; c1 = m ⊕ SHA3-384(e)[255:0];
K = SHA3-384(m ‖ c0 ‖ c1)[255:0]. `tb/bike_encaps_model.sv` is a reference version of it.

## How this relates to BIKE and to HLS implementations

* **Not the BIKE reference byte format.** Hash inputs here are sequences of 64-bit words with
  zero padding above r, not the byte strings of the specification. The seed is 32 bits. The
  sampler's rejection rule is this design's own. Key pairs and shared keys are therefore
  self-consistent between this hardware and the matching software, but will not match BIKE
  known-answer tests.
* **SHA3-384 truncated.** Its output is cut to 256 bits wherever a 256-bit value is needed.
* **Decoder.** The decoder is the plain parallel bit-flipping loop with the level-1 threshold
  rule. It is not the specification's BGF decoder with gray and black steps. Its failure rate
  is therefore higher than BIKE's target. A decode that does not converge within `MAX_ITER`
  iterations ends in implicit rejection.
* **Unrolling factor.** The HLS multiplier unrolls and pipelines its inner Comba loop, but the
  factor is not published. The 2 used here is a guess that keeps the area at two carry-less
  multipliers. The loop is pipelined in the sense that it takes one step per clock with no
  stall between columns or sub-products.
* **Cycle counts.** Counts are well below those of the HLS modules this split was evaluated
  with (about 13.8 M cycles for key generation and 13.5 M for decapsulation at 100 MHz). That
  is because the architecture differs: dedicated word-serial datapaths instead of compiled C.
  Area has not been measured; no FPGA place-and-route of this RTL was done.
* **Processor interface.** Not modelled (no AXI wrapper). The top exposes the accelerators'
  ports directly.

## Interfaces and timing conventions

All modules use one clock `clk` and an active-low asynchronous reset `rst_n` that clears all
state. `start`/`init` are single-cycle pulses. `done` is a single-cycle pulse. Loads are
accepted only while a unit is idle. Read ports are combinational on the address.

## Verification

Every module has a self-checking testbench in `tb/` that ends with a `TB_RESULT` line. The
reference models in `tb/bike_ref_pkg.sv` are written independently of the RTL: Keccak with LFSR
round constants, a word-level sponge, the sampler rule, and bit-level polynomial arithmetic.

| testbench | what it shows |
|---|---|
| `tb_keccak_f1600` | zero-state known answer, random states, 24-cycle latency |
| `tb_sha3_shake` | SHA3-384/SHAKE256 known answers, random lengths across block borders, back-pressure |
| `tb_poly_sampler` | dense vector, positions and words consumed equal the rule, 1 and 2 blocks |
| `tb_gf2x_mul` | products for depth 0/1/2 and at r = 12323, exact latency |
| `tb_gf2x_pow2k` | k squarings for k from 0 to r−1, latency |
| `tb_gf2x_inv` | a·a⁻¹ = 1, equality with a^(2^(r−1)−2), number of multiplications |
| `tb_bf_decoder` | planted errors recovered at level 1; small cases; a hopeless case stops at `MAX_ITER` |
| `tb_keygen_accel` | h0/h1 equal the reference samples, h = h1·h0⁻¹, σ latched |
| `tb_decaps_accel` | valid ciphertexts, modified c1 (rejection), random c0 (decode failure) |
| `tb_bike_hwsw_top` | end to end at r = 269 over several seeds; counts concurrency, multi-iteration decodes, accepts, rejections, decode failures |
| `tb_bike_hwsw_full` | one full level-1 key generation, software encapsulation and decapsulation at default parameters |

To run one with Verilator 5 (the same pattern works for every testbench; list the packages
first):

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/bike_pkg.sv tb/bike_ref_pkg.sv tb/bike_encaps_model.sv rtl/*.sv \
      tb/tb_bike_hwsw_full.sv --top-module tb_bike_hwsw_full
    ./obj_dir/Vtb_bike_hwsw_full

The full-size run simulates about 5.9 M cycles and takes roughly 10 s.

## Changing the design

* **Another BIKE level.** Set `R`, `D`, `T` and the threshold constants on `bike_hwsw_top`.
  r must be prime with 2 primitive modulo r, and D odd.
* **Multiplier depth and width.** Trade multiplier time for area with `LEVELS` (a top-level
  parameter) and with `UNROLL`, the number of carry-less multipliers in `gf2x_mul` (default 2).
* **Small simulations.** Override the threshold with `THR_MUL = 0`,
  `THR_ADD = thr << 24`, `THR_MIN = 0` for a fixed threshold, as the small testbenches do.
