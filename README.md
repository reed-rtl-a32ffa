# REED chiplet accelerator for CKKS homomorphic encryption: RTL

Homomorphic encryption lets a server compute on encrypted data. The cost lies in
arithmetic on very large polynomials: a CKKS ciphertext at the working size is a
pair of polynomials of degree N = 2^16, each split into up to 32 residue
polynomials ("limbs") modulo 54-bit primes. Almost all of the time goes into
number-theoretic transforms (NTT), point-wise modular multiply/add and
automorphisms (coefficient permutations). Most of the traffic comes from
key switching, which multiplies every limb with a large switching key.

This RTL implements a chiplet design for that workload. Four identical chiplets
sit in a ring, each with its own HBM stack. Each chiplet has one processing unit
(PU), built around three ideas:

* **A transpose-free hybrid NTT.** A limb is stored as N1 × N2 = 1024 × 64
  coefficients: 64 lane memories of 1024 rows. One pipeline does the
  four-step NTT on one row per cycle, so a limb takes 1024 cycles. It does
  this without ever transposing the matrix in memory. The same hardware runs
  backwards for the inverse transform.
* **Key multiplication fused into the NTT.** During key switching each NTT
  output row goes straight into two multiply-accumulate units, together with
  the matching row of the first key half. The second key half is not stored at
  all: an on-chip PRNG regenerates it from a 64-bit seed.
* **A ring schedule for key switching.** Each chiplet converts its own limb to
  the coefficient domain. It then passes the limb to its left neighbour while
  it works on the limb it received from its right neighbour. After four steps
  every chiplet has used every limb. All memories are double-buffered
  (ping-pong), so HBM prefetch and the link transfer overlap with computation.

Everything here is parameterised. The defaults are the main configuration:
N1 = 1024, N2 = 64, w = 54-bit words, 32 moduli, 4 chiplets.

## 1. Arithmetic (`reed_pkg`, `mont_mult`)

The moduli have the form q = 2^53 + qH·2^18 + 1, where qH has at most 10 bits.
Such a q is 1 mod 2^18, so Montgomery reduction with 18-bit words needs no
multiplication by q^-1. The quotient digit is u = −t mod 2^18, and u·q takes
only shifts plus one 18×10-bit product. `mont_mul(a,b,q)` performs three such
word steps and returns a·b·2^-54 mod q.

The design keeps every constant operand in Montgomery form (x·2^54 mod q).
This covers twiddles, keys and scaling factors. Data therefore stays in normal
form throughout, and a product with a constant needs no correction. The
following need Montgomery form on the host side:

* the NTT tables;
* keys in the KEY memory;
* any operand b of a MAS multiply.

PRNG output is used as it is. The reduced key is then ksk1·2^-54, which is an
equally uniform key.

Example primes for testing: 0x20000000140001, 0x20000000280001,
0x20000000640001 and 0x200000007c0001, all of this form. Primitive roots are
found by trial exponentiation.

## 2. The hybrid NTT (`hybrid_ntt`, `sdf_ntt`, `sdf_stage`, `unrolled_ntt`)

The transform is negacyclic: A[k] = Σ a[n]·ψ^(n(2k+1)), with ψ a primitive
2N-th root of unity. Split n = i·N2 + j and k = k1 + N1·k2. The transform then
factors into four steps:

| step | what it does | hardware |
|------|--------------|----------|
| PP   | multiply a[i][j] by ψ^(i·N2+j) | two multipliers per lane: a lane constant ψ^j and a row factor ψ^(N2·i) from a table |
| SDF  | an N1-point NTT down each lane (column) | N2 single-path delay-feedback pipelines, log2 N1 radix-2 stages with delay lines N1/2 … 1 |
| HP   | multiply by ω^(j·k1), with ω = ψ² | a running product per lane, updated once per row, so no table is needed |
| U    | an N2-point NTT across the lanes of one row | fully unrolled butterfly network, one level per cycle |

**Why there is no transpose.** The SDF steps process a column as a time
stream, one row per cycle, while the U step processes a row in space. So the
data never has to be rearranged in memory. The coefficient-domain polynomial
is stored row-major: coefficient n is at row n / N2, lane n mod N2. The
NTT-domain polynomial comes out column-major: slot k is at row k mod N1, lane
k / N1.

**Row order.** The forward SDF expects its input rows in bit-reversed order,
so the PU reads row bitrev(t) at step t. The forward result leaves in natural
order. The inverse runs U⁻¹ → HP⁻¹ → SDF⁻¹ → PP⁻¹, using Gentleman-Sande
butterflies with the stages reversed. It reads natural order and produces
bit-reversed rows. Each output carries the row address to write it to, so
memory always holds natural order. The 1/N scaling is folded into the inverse
row-factor table.

**Timing.**
- Latency through the unit: N1 + log2 N1 + log2 N2 + 2 cycles. The SDF
  contributes N1 − 1 + log2 N1, PP 2, HP 1 and U log2 N2.
- A new polynomial can enter every N1 cycles.
- Direction and modulus index must stay fixed while a polynomial is in flight.

**Constant tables.** They are written through a `cfg_*` port, per modulus and
direction. The encoding is given in the header of `rtl/hybrid_ntt.sv`: kind 0
is q and 2^54 mod q; 1 row factors; 2 SDF twiddles; 3 lane constants; 4 U-NTT
twiddles. There are 32 modulus slots, enough for L + 2 = 32 moduli at L = 30.

## 3. MAS and automorphism units

`mas_unit` has N2 lanes. Each computes a+c, a−c, a·b or a·b+c mod q in two
pipeline stages, one row per cycle.

`aut_unit` applies the automorphism X → X^g for odd g. In the NTT domain
this moves slot s to slot d with 2d+1 = g·(2s+1) mod 2N. For a rotation by r
slots the host passes g = 5^(−r) mod 2N; for conjugation it passes 2N − 1. With the column-major slot
layout, one source row maps to exactly one destination row. Its N2
coefficients only have to be permuted across the lanes. `shuffle_tree` does
this in log2 N2 registered levels. Level s merges neighbouring batches of 2^s
lanes, and each output picks its value from one of two positions using one
bit of the destination lane. This works for every permutation of the form
dst = start + g·j with g odd, which covers all automorphisms.

- Latency: log2 N2 + 1 cycles.
- Out of place: the source and destination memories must differ.

## 4. PRNG (`trivium_core`, `prng_unit`)

Each `trivium_core` is a Trivium keystream generator unrolled 64 steps per
cycle, giving 64 bits per cycle. A 64-bit seed, zero-extended to the 80-bit
key, loads in 18 cycles: 1152 warm-up steps, 64 per cycle.

`prng_unit` runs N2 cores side by side, with IV = lane number. It reduces the
low 54 bits of each word into [0, q) with one conditional subtraction, which
is not exactly uniform. The result is one key coefficient per lane per cycle.
Reseeding with the same seed reproduces the key, so the second key half never
leaves the chip.

## 5. The processing unit (`reed_pu`, `poly_mem`, `ins_ctrl`)

### Memories

There are five `poly_mem` memories, each holding two halves of N1 × N2
coefficients (one limb per half):

| memory | role | HBM port |
|--------|------|----------|
| ACC0 | accumulator c0 | read + write |
| IN   | input limb | write |
| ACC1 | accumulator c1 | read + write |
| KEY  | switching-key half ksk0 | write |
| SM   | the limb being sent and received over the ring | none (ring link) |

The compute side uses the active half. The HBM port and the ring receiver use
the inactive half. A SWAP exchanges them.

SM is wired the other way around for the transmitter: XFER sends the active
half, and an INTT writing into SM goes to the inactive half. That is why the
ring schedule does INTT, SWAP, XFER in that order.

### Instructions

Instructions are 128 bits wide (`instr_t` in `reed_pkg`). The host loads them
into a 1024-entry instruction memory, and `exec` starts the program.

| opcode | fields | effect | cycles (issue → done) |
|--------|--------|--------|--------|
| NTT | src_a, dst, mod_idx, inverse, keymul | forward/inverse NTT of one limb; with keymul, ACC0 += NTT·KEY and ACC1 += NTT·PRNG instead of a write to dst | 2·N1 + log2 N1 + log2 N2 + 3 (+3 with keymul) = 2067 / 2070 |
| MAS | mas_op, src_a, src_b, src_c, dst, unit | point-wise op on one limb; src_b may be the PRNG, any source may be zero | N1 + 3 |
| AUT | src_a, dst, imm = g, unit | automorphism | N1 + log2 N2 + 2 |
| SWAP | swap_mask | exchange halves of the selected memories | immediate |
| SEED | imm = seed | reseed the PRNG (waits for the 18-cycle load) | 18 + overhead |
| XFER | — | start sending SM's active half to the left neighbour; opens the receive window | immediate (runs in background) |
| XWAIT | — | wait until the send is done and N1 rows were received | until then |
| HALT | — | stop; `halted` goes high | — |

One instruction runs at a time. The controller adds 2 cycles between a done
and the next issue. An NTT therefore occupies the PU for about 2·N1 cycles:
N1 to read the rows in and N1 to write them out. A streamed implementation
that overlaps consecutive NTTs would approach N1 cycles per limb. This is the
main performance gap to the figures quoted in section 7.

### Link protocol

- **Transmit side:** `tx_valid`/`tx_ready` plus a row number. Rows may be
  delivered in any order.
- **Receive side:** `rx_valid`/`rx_ready`. The PU raises `rx_ready` only
  between XFER and the end of the matching XWAIT.

Without this window, a faster neighbour could overwrite the inactive SM half
while it still holds the limb this chiplet is about to swap in.

### HBM ports

HBM rows are written and read directly on the inactive halves at any time.
The host or memory controller decides when, and the instruction stream
decides when to SWAP.

## 6. The ring (`reed_top`)

`reed_top` instantiates R = 4 PUs. Link i carries chiplet i's SM limb to
chiplet (i − 1) mod 4. The physical die-to-die links, the HBM stacks and their
PHYs, and the host interface are not RTL. Their ends are brought out as
ports:

- `link_tx_*[i]` is what chiplet i sends.
- `link_rx_*[i]` is what chiplet i receives.
- A link model, or plain wires `link_rx = link_tx[(i+1) mod 4]`, closes the
  ring.

The key-switching inner loop for one chiplet is:

```
NTT inverse  IN -> SM            ; own limb to coefficient domain
SWAP SM
repeat 4:
  XFER                           ; send current limb left, open receive window
  NTT keymul SM  (per target modulus, with KEY swapped in between)
  XWAIT                          ; neighbour's limb has arrived
  SWAP SM, KEY
```

## 7. Sizes and what fits

The main parameter set is N = 2^16, L = 30 levels, dnum = L + 1 (one special
modulus), 54-bit words. Storage per chiplet:

- Each memory half holds one limb: 1024 × 64 × 54 bits = 432 KiB.
- Ten halves make 4.2 MiB.

The constant tables hold 32 moduli.

**Estimated times.** These follow from the cycle counts above at a 1.5 GHz
clock. They are not measured.

- One NTT, issue to done: 2067 cycles, about 1.4 µs. Hence:
  - a key-switch ring step with 8 fused NTTs per chiplet: about 11 µs;
  - four steps: about 44 µs;
  - plus the input INTTs.
- A limb-wise MAS: 1027 cycles, about 0.7 µs. So 31 limbs take about 21 µs on
  one chiplet, or about 5 µs spread over four.

**What the design cannot run:**

- **Other decompositions (dnum < L + 1).** These need base conversion units,
  which are not built.
- **The 512 × 128 split.** It is a parameter change (N1 = 512, N2 = 128), not
  the default build.
- **Whole bootstrapping and application programs.** They are sequences of the
  instructions above, and no microcode for them is included.

## 8. Departures and choices

Cases where descriptions of the architecture disagree or are silent:

- **PRNG width.** The architecture describes one Trivium unit per PU that
  produces one 64-bit word per cycle. The fused key multiplication, however,
  consumes one coefficient per lane per cycle. This design uses N2 Trivium
  cores.
- **HBM write-back.** Two memories (ACC0, ACC1) write back to HBM. Some
  descriptions say three.
- **On-chip storage.** The storage budget was described as 14 polynomials;
  this design has 10 limb halves.
- **Defined by this design, not taken from the architecture:**
  - the instruction encoding;
  - the Montgomery-form convention;
  - the XWAIT receive window;
  - one-cycle register-array memories (no SRAM macros);
  - the per-modulus table loading.
- **Clock.** The target is 1.5 GHz, but `mont_mul` is a single combinational
  function inside a one-cycle stage. Reaching the target clock would need
  retiming into the three word steps; only the cycle counts quoted above are
  modelled.

## 9. Simulation

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`. `tb/tb_math_pkg.sv` holds reference
models: modular arithmetic, a reference NTT and a software Trivium. Build and
run any testbench with plain Verilator, for example:

```
verilator --binary --timing -Irtl -Itb tb/tb_math_pkg.sv rtl/reed_pkg.sv \
  rtl/mont_mult.sv rtl/sdf_stage.sv rtl/sdf_ntt.sv rtl/unrolled_ntt.sv \
  rtl/hybrid_ntt.sv rtl/mas_unit.sv rtl/shuffle_tree.sv rtl/aut_unit.sv \
  rtl/trivium_core.sv rtl/prng_unit.sv rtl/poly_mem.sv rtl/ins_ctrl.sv \
  rtl/reed_pu.sv rtl/reed_top.sv tb/tb_reed_top.sv --top-module tb_reed_top
./obj_dir/Vtb_reed_top
```

| testbench | size | what it shows |
|-----------|------|---------------|
| tb_mont_mult, tb_mas_unit | 54-bit, 4 primes | products, all four MAS ops, latency |
| tb_sdf_ntt, tb_unrolled_ntt, tb_hybrid_ntt | small N1/N2 | forward and inverse against a direct O(N²) transform, several moduli, back-to-back polynomials, latency |
| tb_aut_unit | small | all automorphisms against the slot map |
| tb_trivium_core, tb_prng_unit | 64-bit words | keystream against a software model, 18-cycle load |
| tb_poly_mem, tb_ins_ctrl | small | ping-pong behaviour, instruction sequencing and timing |
| tb_reed_pu | N1=16, N2=4 | NTT/INTT, fused key multiplication, MAS, AUT, link stalls |
| tb_reed_top | 4 chiplets, N1=16, N2=4 | the full ring key-switch schedule with random link back-pressure and out-of-order delivery; ACC0/ACC1 compared with a direct reference; each mechanism counted |

There is no testbench at the default size (1024 × 64, four chiplets). Verilator
needs more than ten minutes just to compile it, because each chiplet holds
about 4 MiB of register arrays and 64 lanes of unrolled pipelines. The largest
end-to-end size simulated with a complete key-switch schedule is 4 chiplets
at N1 = 16, N2 = 4. The NTT unit testbenches use N1 = 16, N2 = 4 (and N2 = 8
for the unrolled NTT); the arithmetic and Trivium testbenches run at the full
54/64-bit word size.
