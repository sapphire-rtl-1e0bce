# Sapphire: a programmable lattice-cryptography core in SystemVerilog

Lattice-based public-key schemes such as NewHope, CRYSTALS-Kyber, CRYSTALS-Dilithium, qTESLA and Frodo spend nearly all of their time on three things:
- arithmetic on polynomials with a few hundred to a few thousand coefficients modulo a prime q;
- number theoretic transforms (NTTs) that make polynomial multiplication cheap;
- drawing polynomials from various distributions with a pseudo-random generator.

The schemes differ only in n, q and the distributions. So instead of one fixed accelerator per scheme, this core holds a small set of configurable engines and runs short programs from its own instruction memory:
- a 24-bit modular arithmetic unit built around a unified butterfly;
- a polynomial cache made of single-port SRAMs;
- a constant-geometry NTT sequencer;
- a SHAKE pseudo-random generator on a Keccak-f[1600] core, which also computes SHA3-256/512 hashes;
- a sampler for rejection, binomial, Gaussian (CDT), bounded-uniform and trinary distributions.

A host processor loads data and a program over a memory-mapped port, starts the core, waits for the interrupt and reads the results back.

The RTL follows the published architecture of the Sapphire processor (Banerjee, Ukyab and Chandrakasan): its block structure, memory sizes, reduction algorithms, NTT memory organisation, sampling algorithms and instruction list. The published description leaves several things open, and this code defines them itself:
- the binary instruction encoding;
- the host address map;
- the handshakes between blocks;
- a few corner cases.

Each is pointed out below and in the opening comment of the file concerned.

## Top level

`sapphire_top` has plain ports:

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `CLK`, `RST` | in | 1 | clock, synchronous active-high reset |
| `ADDR` | in | 16 | word address (memory map below) |
| `WDATA` | in | 32 | write data |
| `WEN`, `REN` | in | 1 | write / read strobe, one access per cycle |
| `RDATA` | out | 32 | read data, valid the cycle after `REN`, held until the next read |
| `INT` | out | 1 | set when a program executes `END`, cleared by the next start |

```
 host ──ADDR/WDATA/RDATA──► mmio_if ──► imem (256x32) ─► sapphire_ctrl ─┬─► ntt_ctrl (NTT clock)
                              │   └──► CDT RAM (64x32) ─► sampler ◄─ prng ◄─ keccak_core (SHA-3 clock)
                              │                          (sampler clock)          │
                              ├──► constants RAM (5120x24) ◄── twiddle reads ─────┤
                              └──► poly_cache (2 banks x 4 x 1024x24) ◄─ 4 ports ─┴─► alu (butterfly)
```

Memories: cache 24 KB, NTT constants 15 KB, instructions 1 KB and CDT 0.25 KB, 40.25 KB in total. Every memory is the `sram_sp` model: a synchronous single-port array with a one-cycle read. On silicon each instance maps onto an SRAM macro of the same shape.

## Modular arithmetic (`mod_add`, `mod_sub`, `mod_mul`, `red_*`, `butterfly`, `alu`)

Coefficients are 24-bit residues in [0, q). Addition and subtraction each compute both candidate results in parallel, x + y and x + y − q (or x − y and x − y + q). The carry or borrow picks one, so there is no data-dependent timing.

The multiplier forms the 48-bit product and reduces it in one of three ways. The mode register `qmode` selects which:

| qmode | Reduction | Used for |
|---|---|---|
| 0–11 | dedicated Barrett block with constant m, k | 7681, 12289, 40961, 65537, 120833, 133121, 184321, 8380417, 8058881, 4205569, 4206593, 8404993 |
| 12 | configurable Barrett, run-time q, m = ⌊2^k/q⌋, k ∈ [16, 48] | any other q < 2^24 |
| 13 | keep the low k bits | q = 2^k (Frodo) |

The dedicated blocks (`red_const` instances inside `red_pseudo`) use fixed constants, which a synthesis tool turns into shift-and-add networks. The inputs of the unselected blocks are forced to zero so that they do not toggle. The prime 65537 = 2^16 + 1 uses the folding x0 − x1 + x2 instead of Barrett (`red_65537`).

`butterfly` contains two adders, two subtractors and one multiplier, with multiplexers in front of them. With the same hardware it computes:
- the Cooley–Tukey form (a + ωb, a − ωb), used for DIT;
- the Gentleman–Sande form (a + b, (a − b)ω), used for DIF.

`alu` reuses the butterfly for coefficient-wise modular ADD, SUB and MUL. It adds the bit-wise AND, OR and XOR and the left and right shifts for the `CONST_*` polynomial operations. The `w_neg` input replaces ω by q − ω; inverse transforms use it, as described below.

## Polynomial cache and conflict-free access (`poly_cache`)

The cache is made of two banks, left and right. Each bank has four 1024×24 single-port SRAMs, giving 8192 coefficients in total. That is four polynomials of degree 2048, eight of degree 1024, and so on, up to thirty-two of degree 256. Polynomial p of length n occupies the linear words [p·n, p·n + n). Words 0–4095 are the left bank and 4096–8191 the right bank, so with n = 256 polynomials 0–15 are on the left and 16–31 on the right.

Within a bank, coefficient i goes to SRAM number {i[lg n − 1], i[0]}: the most significant bit of the index and the least significant bit. Its row is {polynomial-within-bank, i[lg n − 2 : 1]}. The butterflies of the NTT below always touch either the pair (2j, 2j+1) or the pair (j, j + n/2). The two members of either pair differ in one of those two bits, so they always sit in different SRAMs. This is why one butterfly per cycle needs only single-port memories.

`poly_cache` has four request ports. Each port chooses its bank, SRAM and row, and the read data returns on the same port one cycle later. An assertion reports two ports that hit the same SRAM in one cycle; if that happens, the lower-numbered port wins. The ports are used as follows:
- while the NTT runs, ports 0 and 1 read a butterfly's inputs and ports 2 and 3 write its outputs;
- coefficient passes use port 0 to read the source, port 1 to read the destination and port 2 to write.

A two-operand pass therefore needs its two polynomials in different banks, or in different SRAMs. Programs must respect this, as the published example programs do (sources below 16 and destinations at 16 and above for n = 256).

## The NTT schedule (`ntt_ctrl`)

This is the least obvious part of the design.

A textbook in-place NTT changes its stride every stage, so its access pattern cannot stay conflict-free on single-port memories. The core uses the constant-geometry (Pollard) form instead. Every stage has the same access pattern, and data moves out of place from one bank to the other:

```
DIT (bit-reversed in, natural out):  read a[2j], a[2j+1]      write a'[j], a'[j+n/2]
DIF (natural in, bit-reversed out):  read a[j],  a[j+n/2]     write a'[2j], a'[2j+1]
for stage s = 1..lg n, j = 0..n/2-1:
   DIT twiddle exponent  e = floor(j / 2^(lg n - s)) * 2^(lg n - s)
   DIF twiddle exponent  e = floor(j / 2^(s-1))      * 2^(s-1)
```

Each cycle issues one read pair, one twiddle read and, one cycle later, one write pair. Reads in a stage go to one bank and writes to the other. Each stage takes n/2 + 1 cycles: the extra cycle keeps the last write of one stage apart from the first read of the next.

A full transform alternates banks lg n times. When lg n is odd the result lands in the other bank, at the destination polynomial. When lg n is even it lands back in the source bank. The sequencer then runs a copy pass of n/2 + 1 cycles (two coefficients per cycle) to move it to the destination. The published cycle count does not include that pass. Its figure is (n/2 + 1)·lg n + (n + 1) for a negacyclic forward transform, including the ψ pre-scaling. This design needs:
- n = 512: 2,827 cycles, against the published 2,826;
- n = 256: 1,419 cycles, against 1,289, because of the copy pass;
- n = 1024: 6,669 cycles, against 6,155, also because of the copy pass.

**Twiddles.** The constants RAM holds, for the configured n, three tables:

| Address | Contents |
|---|---|
| [0, n/2) | ω^j, where ω is a primitive n-th root of unity |
| [n/2, 3n/2) | ψ^i, where ψ² = ω, for negacyclic pre-scaling |
| [3n/2, 5n/2) | n⁻¹·ψ^(−i), the inverse post-scaling, which folds in the 1/n factor |

Only forward powers of ω are stored. Inverse transforms use ω^(−e) = −ω^(n/2 − e). The sequencer reads address n/2 − e and sets `tw_neg`, which makes the ALU use q − ω. For e = 0 it reads address 0 with no negation. At n = 2048 the three tables need exactly 5120 words, the RAM's size.

**Negacyclic multiplication.** Multiplication in Z_q[x]/(x^n + 1) takes six steps:
1. `mult_psi` on both operands.
2. A DIF forward transform of each (natural order in, bit-reversed out).
3. A coefficient-wise `MUL`.
4. A DIT inverse transform (bit-reversed in, natural out).
5. `mult_psi_inv`.

No bit-reversal pass is needed anywhere in this chain. The end-to-end testbench runs exactly this sequence and compares the result with a schoolbook product.

## Pseudo-random generation (`keccak_round`, `keccak_core`, `prng`)

`keccak_core` keeps the 1600-bit state in registers and applies one full round per clock, so a permutation takes 24 cycles. It has `clear`, `absorb` (XOR a block into the state) and `permute` commands.

`prng` implements SHAKE-128 or SHAKE-256. On start it absorbs one block and permutes. The block is the 256-bit seed (r0 or r1), then the counters c0 and c1 as two little-endian bytes each, then SHAKE padding (0x1F … 0x80). The seed-and-counter message layout is this design's own choice. It then hands out the rate 32 bits at a time through a valid/ready handshake: 42 words for SHAKE-128 and 34 for SHAKE-256. When the rate is used up it permutes again, and the consumer stalls for those cycles. A program derives independent streams from one seed by changing c0 and c1. The `perms` output counts permutations.

The same Keccak state also serves the `sha3` instructions. `sha3` init clears the state and fixes the width: SHA3-256 (rate 34 words) or SHA3-512 (rate 18 words). Each absorb instruction then streams 32-bit message words into the rate, one per cycle, through a valid/ready handshake. A polynomial gives n words, each coefficient zero-extended to 32 bits. A seed gives its 8 words. When the rate fills, the state is permuted and the stream stalls for about 24 cycles. The digest instruction adds the SHA-3 padding (0x06 … 0x80), runs the last permutation and writes the digest into the seed registers. SHA3-256 writes to r0 or r1. SHA3-512 writes its low half to r0 and its high half to r1. A program can therefore hash a public polynomial into a new seed and sample from it directly. The message packing (word order, zero extension) is this design's own choice.

## Sampling (`sampler`)

The sampler takes 32-bit PRNG words. It masks each word to the bit width that the distribution needs and post-processes it. Each candidate comes out with an accept bit and, when it is accepted, its value as a residue mod q (negative values become q − |v|).

| Type | Method | Rate |
|---|---|---|
| rejection, uniform in [0, q) | x of ⌈lg(c·q)⌉ bits, accepted if x < c·q, then reduced mod q. The factor c is 1, 3, 5, 7 or 11 per prime, which lowers the rejection rate. | 1 candidate / cycle |
| binomial, k ≤ 32 | HW(a) − HW(b) of two k-bit fields | 1 / cycle; k > 16 takes 2 words |
| CDT Gaussian, s ≤ 64, r ≤ 32 | inversion: e = #{z < s : r1 > T[z]} with the sign from one extra bit. The whole table is always scanned, so time is constant. | s + 3 cycles / sample |
| bounded uniform in [−η, η] | x of `bitlen` bits, accepted if x ≤ 2η, value x − η | 1 candidate / cycle |
| trinary 1 | m positions drawn at random, each set to ±1 if still zero | redraws on collision |
| trinary 2 | m0 positions set to +1, then m1 positions set to −1 | redraws on collision |
| trinary 3 | k-bit x: 0 → +1, 1 → −1, otherwise 0 (Pr(±1) = 2^−k each) | 1 / cycle |

For the two fixed-weight trinary types, the controller first clears the polynomial (n cycles). It then reads the drawn position and writes it only if it is still zero, and counts the positions it keeps. This needs a read, so these types take two cycles per candidate. The CDT table lives in a 64×32 RAM that the host loads.

## Programs (`sapphire_ctrl`)

The controller fetches a 32-bit instruction, decodes and executes it. A simple instruction takes two cycles. It holds the programmer-visible state:
- the 24-bit `reg` and `tmp`;
- the 16-bit loop counters `c0` and `c1`;
- the 2-bit `flag` (−1, 0, +1, stored as two's complement);
- the configuration (lg n, modulus mode, q, m, k);
- the three clock-gate enables.

Long instructions are coefficient passes. In cycle i the controller reads coefficient i, and in cycle i+1 it writes the ALU result. A pass over n coefficients therefore takes n + 1 cycles. Sampling runs until n samples are accepted, and a transform waits for `ntt_ctrl`.

Instruction format: opcode in bits [31:27], destination / single polynomial in [22:16], source polynomial in [15:9].

| Op | Name | Fields | Effect |
|---|---|---|---|
| 0 | `nop` | | |
| 1 | `end` | | stop, raise `INT` |
| 2 | `config` | [26:23] lg n, [22:19] qmode, [18:13] k for q = 2^k | set ring and modulus |
| 3 | `clock_config` | [2] Keccak, [1] NTT, [0] sampler | clock-gate enables |
| 4 | `c0/c1 = / += / -= #v` | [26] c1, [25:24] set/add/sub, [15:0] v | loop counters |
| 5, 6 | `reg = #v`, `tmp = #v` | [23:0] v | |
| 7 | `tmp = tmp (op) reg` | [26:24] ADD SUB MUL AND OR XOR RSHIFT LSHIFT | |
| 8 | `reg = tmp` | | |
| 9 | `reg = max_elems / sum_elems / (poly)[i]` | [26:25] max/sum/element, [24:23] i from #v / c0 / c1, [11:0] #v | |
| 10 | `(poly)[i] = reg` | as 9 | |
| 11 | `transform` | [26:25] DIF_NTT DIF_INTT DIT_NTT DIT_INTT | dst ← NTT(src) |
| 12 | `mult_psi`, `mult_psi_inv` | [26] inverse | poly ·= ψ^i or n⁻¹ψ^(−i) |
| 13 | sample | [26:24] type, [23] SHAKE-256, [15] seed r1, [14:0] parameters | see sampler |
| 14 | `init` | | poly ← 0 |
| 15 | `poly_copy` | | dst ← src |
| 16 | `poly_op` | [26:23] ADD SUB MUL BITREV CONST_ADD … CONST_LSHIFT | dst ← src (op) dst, or src (op) reg |
| 17 | `shift_poly` | [26] ring x^n − 1 (else x^n + 1) | dst ← x·src |
| 18 | `eq_check` | | flag ← 1 if src = dst, else 0 |
| 19 | `inf_norm_check` | bound in `reg` | flag ← 1 if all \|c\| ≤ bound (centred), else 0 |
| 20 | `compare` | [26:25] reg/tmp/c0/c1, [23:0] v | flag ← −1 / 0 / +1 |
| 21 | `branch` | [26] on not-equal, [25:24] flag value, [7:0] target | |
| 22 | `sha3` | [26:24] 0 init, 1 absorb poly, 2 absorb seed, 3 digest; [23] SHA3-512 (init); [22:16] poly; [15] seed r1 | digest → r0 or r1 (256), r0 ‖ r1 (512) |

Sampling parameters by type:
- binomial: [5:0] = k.
- CDT: [13:8] = r and [6:0] = s.
- bounded uniform: [4:0] = bit length; η is taken from `reg`.
- trinary 1: [11:0] = m.
- trinary 2: [11:0] = m0, with m1 in `reg`.
- trinary 3: [2:0] = k.

## Host interface (`mmio_if`)

| Address | Contents |
|---|---|
| 0x0000–0x1FFF | polynomial cache (linear word address, bit 12 = right bank) |
| 0x2000–0x33FF | NTT constants RAM |
| 0x4000–0x40FF | instruction memory |
| 0x5000–0x503F | CDT table |
| 0x6000–0x6007 / 0x6008–0x600F | seed r0 / r1, 32-bit words, least significant first; host writes only while idle, `sha3` digests overwrite them |
| 0x7000 | write: start the program at address 0; read: {INT, busy} |
| 0x7001 | [3:0] lg n, [7:4] qmode; write lg n before loading or reading polynomials, since the cache layout depends on it |
| 0x7002–0x7004 | q, m, k for qmode 12 (k also sets the power-of-two width) |
| 0x7005, 0x7006 | read reg, tmp |
| 0x7007 | cycles taken by the last program |
| 0x7008–0x700D | event counters: rejected candidates, branches taken, NTT copy passes, trinary redraws, flag, Keccak permutations |

While a program runs, the core owns every memory. The interface drops host memory accesses and ignores configuration writes and a second start. Reads of the status and registers still work. This keeps the core's constant-time schedules free of host interference.

## Clock gating (`clock_gate`)

The Keccak/PRNG, sampler and NTT sequencer each run on a gated copy of the clock. The gate is a latch, transparent while the clock is low, followed by an AND. The program turns the gates on and off with `clock_config`. The controller, ALU and memories stay on the free-running clock.

## Capacity for the published schemes

With the default sizes, every ring dimension from 256 to 2048 and every q below 2^24 can be configured.

| Scheme | n, q | Polynomial slots | Notes |
|---|---|---|---|
| Kyber-512/768/1024 | 256, 7681 | 32 | Kyber-1024 encryption needs about 23 slots when A is generated one row at a time |
| NewHope-512 / -1024 | 512 / 1024, 12289 | 16 / 8 | NewHope-1024 needs noise polynomials sampled into freed slots |
| Dilithium-I … IV | 256, 8380417 | 32 | Dilithium-IV signing needs about 33 slots in its largest phase, so one vector waits in host memory between programs |
| qTESLA-I / III | 512 / 1024, 4205569 / 4206593 / 8404993 | 16 / 8 | signing and verification fit; key generation needs larger, higher-precision Gaussian tables than the 64×32 CDT RAM |
| Frodo-640/976/1344 | matrix rows tiled into 512+128 / 1024 / 1024+512 arrays, q = 2^15 / 2^16 | | the n×n matrix is generated row by row and never stored |

A program is at most 256 instructions. Longer protocols are split into several programs, with the host moving data in between.

## Where this RTL departs from the published design

- **NTT copy pass.** When lg n is even, the NTT adds a copy pass (n/2 + 1 cycles) so that the result always lands at the destination polynomial. The published cycle counts do not include it.
- **Own encodings and map.** The instruction encoding, the host address map and the PRNG message layout (seed ‖ c0 ‖ c1) are this design's own.
- **Operand order.** `poly_op` computes dst ← src (op) dst.
- **Both reduction styles kept.** Both the dedicated-prime and the configurable Barrett reduction are built and selectable. The published text compares the two without saying which the chip kept; since the chip supports arbitrary q, both are kept.
- **Not modelled.** The host RISC-V processor, pads and SRAM macros are not modelled. The SRAMs are behavioural arrays.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_mod_add`, `tb_mod_sub`, `tb_red_barrett_cfg`, `tb_red_pseudo`, `tb_mod_mul` | random and edge operands against integer arithmetic, for all moduli modes |
| `tb_butterfly`, `tb_alu` | both butterfly forms and all ALU operations |
| `tb_sram_sp` | the four memory shapes: write, read latency, output hold |
| `tb_poly_cache` | all ring sizes and ports against a reference array |
| `tb_ntt_ctrl` | forward and inverse, DIT and DIF, n = 16 to 1024, against a direct DFT, plus cycle counts |
| `tb_keccak_core`, `tb_prng` | Keccak-f[1600] against a model written from its definition, SHAKE-128/256 output words, SHA3-256/512 digests of 0 to 40 words |
| `tb_sampler` | every distribution against a model, plus rates |
| `tb_clock_gate` | glitch-free gating |
| `tb_mmio_if` | address decode, read timing, busy blocking, digest writes into the seeds |
| `tb_sapphire_top` | the whole core at its default sizes |
| `tb_ntt_workloads` | the whole core multiplying random polynomials for (n, q) = (256, 7681), (512, 12289), (1024, 12289), against schoolbook products, with NTT cycle counts |

`tb_sapphire_top` acts as the host, with n = 256 and q = 7681. It loads twiddles, data, a CDT table, seeds and a program that uses every instruction class, then checks:
- the negacyclic product against a schoolbook product;
- every sampler stream against an internal SHAKE model;
- the copy, shift, bit-reversal, comparison and loop results;
- the power-of-two and run-time moduli;
- the cycle counts of the passes and transforms;
- a SHA3-512 of a SHA3-256 digest of a polynomial and a seed, against a model.

It also counts the design's mechanisms and fails if any of them never happened. These are the NTT copy pass, bank ping-pong, rejected candidates, PRNG stalls, trinary redraws, taken branches, gated clocks, a host access dropped while busy, hash stalls and multi-block hashing.

Simulating with Verilator 5, for example the whole core:

```
verilator --binary -j 0 -Wno-fatal --top-module tb_sapphire_top \
    rtl/sapphire_pkg.sv $(ls rtl/*.sv | grep -v sapphire_pkg) tb/tb_sapphire_top.sv
./obj_dir/Vtb_sapphire_top
```

A block test needs only the package, the block's files and its testbench. For example, `rtl/sapphire_pkg.sv rtl/mod_add.sv tb/tb_mod_add.sv` with `--top-module tb_mod_add`. The simulations finish in seconds. The end-to-end test runs in well under a second of simulator time.

## Files

| File | Content |
|---|---|
| `rtl/sapphire_pkg.sv` | width, prime table, opcodes, memory map, cache port type |
| `rtl/mod_add.sv`, `mod_sub.sv` | modular adder and subtractor |
| `rtl/red_barrett_cfg.sv`, `red_const.sv`, `red_65537.sv`, `red_pseudo.sv` | reductions |
| `rtl/mod_mul.sv`, `butterfly.sv`, `alu.sv` | multiplier, unified butterfly, ALU |
| `rtl/sram_sp.sv`, `poly_cache.sv` | memory model and polynomial cache |
| `rtl/ntt_ctrl.sv` | constant-geometry NTT sequencer |
| `rtl/keccak_round.sv`, `keccak_core.sv`, `prng.sv` | Keccak and SHAKE generator |
| `rtl/sampler.sv` | distribution sampler |
| `rtl/clock_gate.sv` | clock gate |
| `rtl/sapphire_ctrl.sv`, `mmio_if.sv`, `sapphire_top.sv` | controller, host interface, top |
