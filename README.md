# A configurable lattice cryptography processor

Ring-LWE and Module-LWE public-key schemes spend nearly all of their time on
two jobs:

- **Sampling.** Polynomials are generated from pseudo-random bits, either
  uniformly or from a narrow error distribution.
- **Multiplying.** Polynomials are multiplied in Z_q[x]/(x^N + 1).

This processor does both jobs in hardware for any polynomial length
N = 64 … 2048 and any NTT-friendly modulus q of up to 24 bits. That range
covers schemes such as Kyber, NewHope, R.EMBLEM and LIMA with one datapath.
A small instruction memory holds the program for the chosen scheme.

The design keeps area low in three ways:

1. **Single-port memories.** The number-theoretic transform (NTT) runs on
   plain single-port SRAM banks. It uses the *constant-geometry* form of the
   NTT, whose access pattern is the same in every stage. This lets one
   butterfly per cycle ping-pong between two halves of the memory without a
   single bank conflict.
2. **One shared butterfly.** A single 24-bit butterfly serves the forward
   transform (Gentleman–Sande form), the inverse (Cooley–Tukey form) and the
   coefficient-wise multiply/add/subtract.
3. **SHAKE as the random source.** Pseudo-random bits come from a
   round-per-cycle Keccak-f[1600] core. One sampler does both uniform
   (rejection) and centred-binomial sampling from the same 32-bit stream.

Each of the three regions has its own clock gate:

- the polynomial memory and arithmetic;
- the Keccak core;
- the sampler.

A region's gate is open only while that region has work.

## Blocks

```
            host pins: addr[15:0] wdata[31:0] wen ren -> rdata[31:0], int_o
                                   |
                               mmio_if ------------------------------+
                 +---------+-------+---------+-----------+           |
                 |         |                 |           |           |
           instr_mem   controller      ntt_const_ram  sha3_prng   lwe_poly_cache
            (1 KB)    (decode, cfg)      (twiddles)   (keccak_core) (8 x 1024 x 24 b)
                           |                 |           |           ^   ^
                           +---- poly_engine-+           |           |   |
                           |     (mod_arith_unit,        +-> dist_sampler
                           |      barrett_reduce) -------------------+   |
                           |       (rejection_sampler, binomial_sampler)-+
               clock gates: NTT_CLK (cache, constants RAM, engine)
                            SHA3_CLK (sponge)  SAMP_CLK (sampler)
```

| Module | Role |
|---|---|
| `lattice_crypto_processor` | Top level. Wires the blocks, the three clock gates and the cache arbitration. |
| `lwe_poly_cache` | 24 KB polynomial store: 2 sides × 4 banks × 1024 words × 24 bits, built from `sram_sp`. |
| `ntt_const_ram` | 5120 × 24-bit table of powers of ψ, loaded by the host. |
| `poly_engine` | Sequencer for NTT, INTT, PMUL, PADD and PSUB over the banks. |
| `mod_arith_unit` | Unified CT/GS butterfly: two adder/subtractors and one multiplier. |
| `barrett_reduce` | Modular reduction for any q of up to 24 bits. |
| `keccak_core`, `keccak_round` | Keccak-f[1600], one round per clock. |
| `sha3_prng` | Sponge: seed registers, absorb, squeeze, 32-bit output stream. |
| `dist_sampler` | Bit mask, rejection sampler, binomial sampler, output multiplexer. |
| `rejection_sampler`, `binomial_sampler` | The two sampling rules. |
| `controller` | Instruction fetch and decode, configuration registers, unit sequencing. |
| `instr_mem` | 256 × 32-bit program store. |
| `mmio_if` | Host address decoder and read multiplexer. |
| `clock_gate` | Latch-based clock gate. |
| `lwe_pkg` | Shared widths, types, opcodes and `bitlen`. |

## Where a coefficient lives

The cache has two **sides**, L and R. Each side has four single-port banks
of 1024 words, and a bank word holds one 24-bit coefficient.

A polynomial is placed by a side and a 6-bit **base**, counted in units of
16 words per bank. So a polynomial of length N takes N/64 base units, and a
side holds 4096/N polynomials:

- 64 polynomials at N = 64;
- 16 at N = 256;
- 2 at N = 2048.

Coefficient `i` of a polynomial at base `b` is stored as follows:

```
bank  = { i >= N/2 , i[0] }          (upper/lower half, odd/even)
word  = 16*b + ((i mod N/2) >> 1)
```

The point of this layout is that both NTT access patterns below touch four
*different* banks in every cycle.

## The constant-geometry NTT on single-port banks

This is the least obvious part of the design.

In an ordinary radix-2 NTT, the butterfly stride changes from stage to stage.
A single-port memory then cannot deliver two operands and accept two results
per cycle without multiple ports or bank juggling.

The constant-geometry NTT fixes the access pattern instead. Every stage
reads the same index pairs and writes the same index pairs. Only the twiddle
factor changes from stage to stage. The data moves to the other side of the
cache in every stage: read L, write R, read R, write L, and so on.

Let L = log2 N. Let ψ be a primitive 2N-th root of unity mod q, and let
ω = ψ². The multiplication is the negative-wrapped convolution: scale by
ψ^i, take a cyclic NTT, multiply point-wise, invert, and scale by N⁻¹ψ^-i.

**Forward (GS butterflies, natural order in, bit-reversed order out)**

```
pass 0 (psi):  y[i] = a[i] * psi^i                      i = 0..N-1
stage s:       u = x[j], v = x[j + N/2]                 j = 0..N/2-1
               y[2j]   = u + v
               y[2j+1] = (u - v) * omega^e,   e = (j >> s) << s
```

**Inverse (CT butterflies, bit-reversed order in, natural order out)**

```
stage s:       u = x[2j], v = x[2j+1],  t = L-1-s
               y[j]       = u + v * omega^-e
               y[j + N/2] = u - v * omega^-e,   e = (j >> t) << t
last pass:     y[i] = x[i] * N^-1 * psi^-i
```

A forward transform followed by the inverse is the identity. Point-wise
multiplication in between gives the negacyclic product. No bit-reversal pass
is needed, because the forward transform leaves its result in bit-reversed
order and the inverse takes that order in.

**Why there is no conflict.** In a forward stage, cycle j reads:

- coefficient j from bank {0, j[0]};
- coefficient j + N/2 from bank {1, j[0]}.

It writes:

- 2j to bank {2j ≥ N/2, 0};
- 2j+1 to the bank with the same upper bit and odd = 1.

The reads are in two different banks of one side. The writes are in two
different banks of the other side.

The read and write of a cycle are on opposite sides. So each bank sees at
most one access per cycle, even with a write from the previous butterfly
overlapping the next read. The inverse is the mirror image.

`poly_engine` holds an assertion that no bank is ever asked for two accesses
in one cycle. It never fired at any simulated size: N = 64, 128, 256, 512,
1024 and 2048.

**Where the result goes.** A transform has L + 1 passes, and each pass swaps
sides. An NTT started at (side, base_a) uses (!side, base_b) as its second
buffer:

- if L + 1 is odd (N = 64, 256, 1024), the result is at (!side, base_b);
- if L + 1 is even (N = 128, 512, 2048), the result is back at
  (side, base_a).

Programs must keep track of this.

**Timing.** The engine issues one butterfly per cycle. It reads in the
issue cycle, and the butterfly result is written on the next edge.

- Each butterfly stage lasts N/2 + 1 cycles: N/2 issues plus one drain cycle.
- The ψ pass needs no drain. Its last write goes to a different side from
  stage 0's first reads.

| Operation | Cycles (start edge to done) | N = 256 |
|---|---|---|
| NTT (with ψ scaling) | N + L(N/2 + 1) | 1288 |
| INTT (with N⁻¹ψ^-i scaling) | L(N/2 + 1) + N + 1 | 1289 |
| PMUL / PADD / PSUB | N + 1 | 257 |

For PMUL, PADD and PSUB, operands a and b must be on opposite sides. The
result c may be on either side and may overwrite an operand.

## Twiddle factors and the constants RAM

All twiddles are read from one table of 2N words per (N, q) configuration.
The host writes it at base `tb` (the SETTB instruction):

```
tb + i      = psi^i  mod q                  i = 0..N-1
tb + N + i  = N^-1 * psi^-i  mod q          i = 0..N-1
```

The butterfly stages need no table of their own:

- ω^e = ψ^(2e) is the entry at `tb + 2e`;
- ω^-e = ψ^(2N-2e) = −ψ^(N-2e) for e > 0, because ψ^N = −1. The engine reads
  entry `tb + N − 2e` and negates it (q − x);
- ω^0 = 1.

Separate ψ, ω and ω⁻¹ tables would need 3N words; this layout needs 2N. The
5120-word RAM therefore holds the tables for N = 2048 (4096 words), or
several smaller configurations side by side.

## Butterfly and modular reduction

`mod_arith_unit` has one multiplier and two adder/subtractors, and works in
one cycle:

- GS mode outputs (u + v, (u − v)·w).
- CT mode outputs (u + v·w, u − v·w).
- The coefficient-wise operations use the same hardware.

Reduction is Barrett reduction with run-time parameters. For s = bitlen(q),
the program supplies mu = ⌊4^s / q⌋ with SETMU, and the unit computes:

```
t = ((x >> (s-1)) * mu) >> (s+1);   r = x - t*q;   up to two subtractions of q
```

This holds for any x < q², and therefore for any q up to 24 bits.

## Pseudo-random bits: the SHA-3 sponge

`sha3_prng` wraps the round-per-cycle Keccak core. A permutation takes 24
cycles.

- **Seeding.** The host writes the 50 seed registers (the full 1600-bit
  state width), including the SHA-3/SHAKE padding bytes.
- **ABSORB.** XORs the rate part of the seeds into the state and permutes.
  Its immediate bit 0 clears the state first.
- **Squeezing.** The rate part of the state is copied into an output shift
  register. It hands out 32 bits per cycle, lowest word first, which is the
  SHAKE byte order.
- **Refill.** When the output register is empty and the sampler still needs
  bits, the core permutes again. That stall is 25 cycles: 24 rounds plus the
  reload.

Rates (MODE instruction):

| Mode | Rate | Words per permutation |
|---|---|---|
| SHAKE-128 | 1344 bits | 42 |
| SHAKE-256 | 1088 bits | 34 |
| SHA3-256 | 1088 bits | 34 |
| SHA3-512 | 576 bits | 18 |

For hashing, the host reads the state back 32 bits at a time.

## Sampling

`dist_sampler` takes 32-bit words from the sponge and writes finished
coefficients directly into the cache. It writes at most one coefficient per
cycle, one cycle after the word that completes it.

- **Uniform (SAMPU).** Mask the word to w bits (SETW) and accept it if it is
  below `bound` (SETBND), a multiple of q chosen close to 2^w. An accepted
  value is reduced mod q with the Barrett unit. A rejected word produces
  nothing.
- **Centred binomial (SAMPB).** With chunk width k (SETK), the sample is
  a = HW(word & (2^k−1)) and b = HW((word >> k) & (2^k−1)), giving a − b mod q.
  Both chunks come from one word when 2k ≤ 32. Otherwise they come from two
  consecutive words.

Cost: binomial sampling takes N cycles plus one refill stall every
(words per permutation) samples. For N = 512 with SHAKE-256 that is
512 + 15 × 25 = 887 cycles.

## Programming model

An instruction is `{opcode[31:27], imm[26:0]}`. The program starts at address
0 when the host writes 1 to the control register. It runs until HALT, which
raises `int_o`.

Configuration instructions take 2 cycles. A unit instruction starts its unit
and waits for it to finish.

| Op | Code | Immediate |
|---|---|---|
| NOP | 0 | – |
| HALT | 1 | – (raises `int_o`) |
| SETQ | 2 | [23:0] q |
| SETMU | 3 | [25:0] ⌊4^s/q⌋, s = bit length of q |
| SETN | 4 | [3:0] log2 N (6…11) |
| SETK | 5 | [5:0] binomial chunk width k |
| SETW | 6 | [5:0] rejection mask width w |
| SETBND | 7 | [25:0] rejection bound |
| SETTB | 8 | [12:0] twiddle table base |
| SETCLK | 9 | [2:0] force clock gates on {samp, sha3, ntt} |
| MODE | 10 | [1:0] 0 SHAKE-128, 1 SHAKE-256, 2 SHA3-256, 3 SHA3-512 |
| ABSORB | 11 | [0] clear state first |
| SAMPU / SAMPB | 12 / 13 | [26] side, [5:0] base of the output polynomial |
| NTT / INTT | 14 / 15 | [26] side, [5:0] base of the source, [11:6] base on the other side |
| PMUL / PADD / PSUB | 16 / 17 / 18 | a = ([26], [5:0]), b = (!side, [11:6]), c = ([18], [17:12]) |

Example: Ring-LWE key generation b = a·s + e at N = 256, written as
side:base. Here L + 1 = 9, so every transform changes side. The operands are
placed so that each PMUL and PADD finds its two operands on opposite sides.

```
SETQ 7681; SETMU 2^26/7681; SETN 8; SETK 4; SETW 16; SETBND 8*7681; SETTB 0
MODE 0; ABSORB 1                 (padded seed already written by the host)
SAMPU L:0                        a
SAMPB R:4                        s
SAMPB R:8                        e
NTT   L:0, other 12              NTT(a) -> R:12
NTT   R:4, other 16              NTT(s) -> L:16
PMUL  R:12 * L:16 -> R:20
INTT  R:20, other 24             a*s    -> L:24
PADD  L:24 + R:8  -> L:28        b
HALT
```

A uniformly random `a` is just as uniform in the NTT domain. A scheme that
defines `a` there, as NewHope does, can drop the first NTT and use the
sampled polynomial directly as the PMUL operand.

The full-size and workload testbenches contain complete, checked programs:

- Ring-LWE;
- a 3×3 Module-LWE product;
- the sampling benchmark.

### Host interface

The host interface uses word addresses. Reads return data in the cycle after
`ren`. While a program runs, memory accesses are ignored. Only the control
register answers then.

| Address | Target |
|---|---|
| 0x0000–0x1FFF | cache: [12] side, [11:10] bank {upper, odd}, [9:0] word |
| 0x2000–0x33FF | constants RAM |
| 0x4000–0x40FF | instruction memory |
| 0x5000–0x5031 | write: seed registers; read: Keccak state |
| 0x6000 | write bit 0: start; read {int, busy} |

## Clock gating

Each region has a latch-and-AND clock gate: the enable is latched while the
clock is low, so the gated clock cannot glitch.

| Gate | Drives | Open when |
|---|---|---|
| NTT_CLK | cache, constants RAM, polynomial engine | SETCLK bit 0, or an engine operation or sampling (which writes the cache) is running, or the host is accessing the cache or constants RAM |
| SHA3_CLK | sponge | SETCLK bit 1, or ABSORB or sampling is running, or the host is accessing seeds/state |
| SAMP_CLK | sampler | SETCLK bit 2, or sampling is running |

The latches in `clock_gate` and the top are intended, and lint reports them
as latches.

## Measured behaviour

All numbers come from simulation of the RTL at its default sizes:

- **NTT, N = 256, q = 7681.** 1288 cycles including the ψ scaling, the same
  count as the fabricated chip.
- **Binomial sampling, N = 512, q = 12289, SHAKE-256.** 887 cycles including
  generation of the random bits. The chip reports 1009 cycles. Here the
  sampler stalls only for the 15 permutation refills. How the chip spends
  its extra 122 cycles is not known.
- **Scheme sizes.** Ring-LWE key generation b = a·s + e gave results equal to
  a schoolbook negacyclic product at:
  - NewHope-1024 (N = 1024, q = 12289);
  - R.EMBLEM-512 (N = 512, q = 40961);
  - LIMA-1024 (N = 1024, q = 133121).
- **Module-LWE.** A 3×3 product t = A·s + e at Kyber-768 size (N = 256,
  q = 7681, k = 4) was also checked.
- **Transform sizes.** NTT/INTT round trips and negacyclic products were
  checked for N = 64, 128, 256, 512, 1024 and 2048, together with the
  cycle counts of both transforms at each size.

## Departures and limits

- **From the published design:**
  - the instruction encoding;
  - the host address map and strobes;
  - the reset polarity;
  - the twiddle table layout;
  - the assignment of GS to the forward and CT to the inverse transform;
  - the sponge's serial squeeze schedule.
- **Table compression.** The published table compression is 38%. This layout
  saves 33% against separate ψ/ω/ω⁻¹ tables.
- **Constants RAM size.** 5120 words is assumed: the 40.25 KB of SRAM, minus
  the 24 KB cache and the 1 KB instruction memory, rounded down.
- **Samplers.** Only uniform and centred-binomial sampling are built. There
  is no discrete Gaussian or other distribution sampler.
- **Padding.** The sponge does no padding. The host writes padded seed blocks
  and absorbs longer messages block by block.
- **Scheduling.** One unit runs at a time. Sampling and NTT do not overlap.
- **Physical parts.** Pads, supply scaling and test structures are not
  modelled.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=<n> failures=<m>`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/lwe_pkg.sv tb/tb_lattice_crypto_processor.sv \
    --top-module tb_lattice_crypto_processor
./obj_dir/Vtb_lattice_crypto_processor
```

- `tb_lattice_crypto_processor` runs the whole processor at its default
  sizes: N = 256, q = 7681 Ring-LWE. It also counts that every mechanism
  happened:
  - rejections;
  - PRNG refills;
  - gate closures;
  - forced-on gates;
  - blocked host accesses;
  - the interrupt.
- `tb_workloads` runs the scheme-sized workloads. It takes several minutes.
- `tb_poly_engine` sweeps N.

The testbenches compute most expected values themselves: schoolbook
negacyclic convolution, and the ψ tables from q and a searched generator.
The hash outputs are checked against short published-algorithm reference
words written into the testbenches. They need no data files.

To change sizes, edit `lwe_pkg`:

- `BANK_WORDS` sets the cache depth, and hence the largest N × number of
  polynomials.
- `CONST_WORDS` sets the constants RAM.
- `CW` sets the coefficient width. `MU_W` must stay `CW + 2`.
