# Medha RTL: a microcoded accelerator for RNS-CKKS arithmetic

Homomorphic encryption schemes such as CKKS (HEAAN) are slow because each
ciphertext is a pair of polynomials of degree 2^14 or 2^15 with several
hundred bits per coefficient. The residue number system (RNS) splits each
coefficient modulus Q into L+1 word-sized primes q_i. Then one ciphertext
polynomial becomes L+1 *residue polynomials*. Each residue polynomial is
processed independently, except during key switching and rescaling. Those
steps must exchange residues between the primes.

The accelerator in this repository follows that structure directly. It has
one **Residue Polynomial Arithmetic Unit (RPAU)** per prime (ten of them).
Each RPAU has its own on-chip memory for every polynomial a homomorphic
multiplication with relinearisation needs. The RPAUs are joined in a
**ring** over which one RPAU at a time broadcasts a residue polynomial to
all others.

The RPAUs are not hard-wired to any one homomorphic operation. They
execute a small **instruction set**: NTT, inverse NTT, coefficient-wise
arithmetic, automorphism, split/join for degree-2^15 rings, and broadcast.
A **program execution unit** with two program controllers issues these
instructions. Most of the time all RPAUs run the same instruction (SIMD).
During mod-down and rescaling the flow splits into two branches, each
followed by a subset of the RPAUs. Every instruction carries an RPAU
mask, so each controller drives its own subset. The two controllers can
also share RPAUs when one drives the NTT units and the other the four
"dyadic" multiply-accumulate cores of each RPAU.

Everything is parameterised. The defaults are the published
configuration: N = 2^14, 16 butterfly cores and 4 dyadic cores per RPAU,
10 RPAUs, 60-bit residues, and modular multipliers pipelined 20 deep.

## Block structure

```
medha_top
 ├─ program_exec_unit
 │   └─ program_controller ×2          instruction memories, in-order issue
 └─ rpau ×10  (joined in a ring)
     ├─ rpau_main_core   "RPAU.All"     16 butterfly cores: NTT/INTT, c-wise ops,
     │   ├─ butterfly_core ×16           split/join, automorphism, broadcast
     │   │   └─ mod_mul, mod_addsub, pipe_delay
     │   ├─ twiddle_gen ×16             twiddle tables + ring/stage scaling multiplier
     │   ├─ auto_addr_gen ×32           automorphism read addresses
     │   └─ bus_switch_matrix ×2        crossbar between cores and banks (read, write)
     ├─ rpau_dyadic      "RPAU.Dyadic"  4 dyadic cores + sequencer
     │   ├─ dyadic_core ×4  (mod_mul, mod_addsub)
     │   └─ ksk0_core ×4 → trivium64    on-the-fly key-switching-key generation
     ├─ mem_access_ctrl                 host / main-core / dyadic access to the banks
     ├─ rpau_memory                     16 banks × 31 polynomial fragments
     └─ ring_node                       one station of the broadcast ring
```

`medha_pkg` holds the sizes, the instruction format and the configuration
map.

## Arithmetic

Residues are W = 60 bits wide. `mod_addsub` computes a sum and a difference
with one conditional correction each.

`mod_mul` computes the full 120-bit product and reduces it in one of two
ways, chosen by a parameter:

- **Barrett reduction** with a run-time modulus q and the constant
  mu = floor(2^120 / q). Two conditional subtractions follow. This serves
  any prime up to 60 bits, so nine of the ten RPAUs can take whatever
  primes the host loads.
- **Add-shift folding** for the sparse prime q0 = 2^59 + 2^25 + 2^22 − 2^20 + 1
  (`q0_reduce`). It uses 2^59 ≡ −(2^25 + 2^22 − 2^20 + 1) and folds the high
  part three times, then applies a final correction. RPAU 0 is built with
  this reducer (`SPARSE_Q0 = 1`).

The result then passes through a delay line, so the multiplier has a fixed
latency of LAT = 20 cycles. Synthesis is expected to retime the product
logic into those registers.

`butterfly_core` is the unified NTT core. It has one multiplier, one adder,
two subtractors and a few multiplexers, and it runs several modes:

| Mode | Result |
|---|---|
| DIT | (u + w·t, u − w·t) |
| DIF | ((u + t)/2, (u − t)·w/2) |
| ADD / SUB | u ± t |
| MUL | t·w |

In DIT the u operand arrives LAT cycles after t and w, so that it meets the
product. In DIF u and t arrive together. In that mode the sum leaves one
cycle later and the difference leaves LAT + 1 cycles later. A tag travels
with each result and carries its write-back address.

Halving mod q is (x + (x odd ? q : 0)) >> 1. The 1/2 factors in the
inverse NTT therefore multiply up to N^−1, and no final scaling pass is
needed.

## Memory layout

Each RPAU memory (`rpau_memory`) has 16 banks, one per butterfly core.
Bank c holds coefficients c·1024 … c·1024+1023 of each of 31 polynomial
slots:

| Slots | Contents |
|---|---|
| 0–12 | Ciphertext residue polynomials (RPM-0…12) |
| 13–21 | Key-switching key, first component (KSK0-0…8) |
| 22–30 | Key-switching key, second component (KSK1-0…8) |

Each bank has two ports for the main core, each with one read and one
write per cycle. The dyadic lanes and the host have their own paths,
selected per bank.

The published design builds each bank from a mix of BRAM and URAM. In it,
RPM-0…7 share one URAM pair and so one read and one write per cycle. That
sharing is **not** modelled: here every slot is equally accessible. A
program that respects the published port limits runs unchanged. A program
that does not respect them also runs here, but would not on that memory.

`mem_access_ctrl` gives the host port 0 of every bank while the RPAU is
idle: one row of 16 coefficients per cycle. Otherwise it passes the main
core's requests through. Dyadic writes go straight to the banks. An
assertion checks that a dyadic write and a main-core write never hit the
same bank address in the same cycle.

## The NTT schedule (the hardest part)

An N-point negacyclic NTT has log2 N = 14 stages of N/2 butterflies. Each
of the 16 cores performs one butterfly per cycle, reading two words and
writing two. So a stage takes BD/2 = 512 cycles, where BD = N/16 is the
bank depth. Stage s pairs coefficients h = N/2^(s+1) apart.

- **Stages 0–3 (cross-bank).** h ≥ BD, so the partner is in another bank.
  Let kb = 1 << (3 − s). Core c serves the bank pair B0 = c & ~kb and
  B0 | kb. In cycle k it takes address 2k + hi, where hi = c & kb, through
  port hi. Every bank then sees exactly one read per port per cycle. The
  two crossbar instances (`bus_switch_matrix`) route these requests.
- **Stages 4–13 (in-bank).** The partner is in the same bank.
  With bl = 13 − s, core c takes u at insert0(k, bl) through port 1 and
  t = u + 2^bl through port 0.

Results are written back to the addresses they came from (in place). The
output is in bit-reversed order: slot i of the transformed polynomial
holds a(ψ^(2·brv(i)+1)), where ψ is a primitive 2N-th root.

Pipeline timing for one slot issued at cycle T:

| Mode | Twiddle request | t read | u read | Write-back |
|---|---|---|---|---|
| DIT | T | T + LAT | T + 2·LAT | After the butterfly latency |
| DIF | T | T + LAT | T + LAT | After the butterfly latency |

All reads happen after the twiddle is ready. The sequencer issues a
stage's 512 slots back to back. It then waits LAT + 3 cycles, so the last
write of the stage lands before the next stage's first read. After the
last stage it waits 2·LAT + 4 cycles.

An NTT or INTT therefore takes 14·(512 + 23) + 21 = **7511 cycles**. The
published figure is about 7,200; the difference is the per-stage pipeline
drain, which this design does not overlap with the next stage.

## Twiddle factors and the three rings

ζ is a primitive 4N-th root of unity mod q. A degree-2N polynomial is
handled as two degree-N halves, using
x^(2N) + 1 = (x^N − ζ^N)(x^N + ζ^N).
The NTT unit therefore supports three rings, selected by the instruction's
`ring` field:

| `ring` | Ring | Scale for stage s |
|---|---|---|
| 0 | x^N − ζ^N (base ring) | 1 |
| 1 | x^N + ζ^N | ζ^(N/2^s) |
| 2 | x^N + 1 | ζ^(N/2^(s+1)) |

Each `twiddle_gen` holds the twiddles of the base ring its core needs, one
table per direction. An entry (stage s, group g) is

    ζ^(2·brv(2^s + g) − N/2^(s+1))   (forward; the inverse table holds the inverse)

Cross-bank stages need one entry per stage. In-bank stage s needs
2^(s−4) entries. That is 4 + (1 + 2 + … + 512) = 1027 entries per direction per core
(the table is sized BD + 3 = 1027).

The twiddle for another ring is the table entry times a per-stage scale,
held in a small register file (3 rings × 2 directions × 14 stages). The
unit's own modular multiplier computes that product. The same multiplier
serves as a second multiplier for coefficient-wise products. The twiddle
appears LAT + 1 cycles after the request.

The host loads the tables through the configuration port. A test bench
computes them with the formulas above.

## Other main-core instructions

| Instruction | What it does | Cycles |
|---|---|---|
| CADD / CSUB / CMUL / CSCALE | One coefficient per core per cycle; CSCALE multiplies by a scalar register, e.g. q_i^−1 mod q_j | BD + 2·LAT + 4 = 1068 |
| SPLIT | (a, b) → (a + s·b, a − s·b), with s = ζ^N from a scalar register; splits a degree-2N polynomial into its two ring components | 1068 |
| JOIN | Inverse of SPLIT: ((a+b)/2, (a−b)·s^−1/2) | 1068 |
| AUTO | x → x^k in the NTT domain; slot j of the result comes from slot brv(((2·brv(j)+1)·k mod 2N − 1)/2) of the source (computed by `auto_addr_gen`, one per read lane) | BD/2 + 2·LAT + 4 = 556 |
| BCAST | RPAU `sidx` streams a polynomial onto the ring, 32 coefficients per cycle; every other RPAU writes it into `dst` | ≈ 512 + pipeline |

For the coefficient-wise operations the published figure is about 512
cycles; this design takes about twice that (see the departures below).

## Dyadic group and on-the-fly keys

`rpau_dyadic` runs four `dyadic_core`s (add, sub, mul, multiply-accumulate)
over a whole polynomial in N/4 + LAT + 3 = 4119 cycles (published: about
4,096). It runs in parallel with the main core. During key switching the
NTTs and the multiply-accumulates overlap this way.

DMACK multiplies by the first key-switching-key component, which is not
stored. Each lane has a `ksk0_core` holding a 64-bit-per-cycle Trivium
(`trivium64`, 18 warm-up cycles of 64 rounds each). Its key is the public
seed (a scalar register). Its IV encodes the key slot and the lane. A
coefficient is the low bit-length(q) bits of a word, reduced once by q.
This halves the key storage.

## Broadcast ring

A `ring_node` in each RPAU forwards a registered beat to the next RPAU
every cycle. A beat is {valid, origin, 32 coefficients}. The sending RPAU's
main core injects beats. Every other node delivers the beats to its main
core, which writes them. A node drops a beat once it has come round to its
origin. Only one RPAU sends at a time; an assertion checks this.

## Program execution

An instruction (`instr_t`, 58 bits) has these fields:

| Field | Meaning |
|---|---|
| op | Opcode |
| mask | 16-bit RPAU mask |
| dst, src1, src2 | Polynomial slots |
| ring | Twiddle ring |
| sidx | Scalar/seed index or broadcasting RPAU |
| galois | Galois element |

Each controller holds a 1024-entry instruction memory and issues in order:

- A main-core instruction issues when the main groups of all masked RPAUs
  are idle. A dyadic instruction waits likewise for the dyadic groups.
- SYNC waits for all masked groups to be idle.
- SYNCC is a rendezvous with the other controller. It also passes if that
  controller has finished.
- END stops the controller.

If both controllers want the same group of the same RPAU, controller 0
wins. `cycle_count` counts the cycles while either controller runs; the
published cycle counts were measured the same way.

## Using the top level

`medha_top` has plain ports:

- **Program loading:** `imem_we/imem_sel/imem_addr/imem_wdata`.
- **Run control:** `start`, `done`, and the counters `cycle_count`,
  `stall_count0/1` and `syncc_count`.
- **Configuration:** `cfg_we/cfg_rpau/cfg_sel/cfg_addr/cfg_data`.
- **Polynomial load/unload:** `host_*`, one row of 16 coefficients per
  cycle; read data follows one cycle later.
- **Activity:** `m_busy` and `d_busy`, one bit per RPAU.

The configuration selects (`cfg_sel_e`) are:

| Select | Contents | Address |
|---|---|---|
| CFG_Q | Modulus | – |
| CFG_MU | Barrett constant | – |
| CFG_QBITS | Bit length of q | – |
| CFG_SCALAR | 16 scalar registers | Register index |
| CFG_SEED | 16 seeds | Seed index |
| CFG_TF | Twiddle tables | {core, direction, index} |
| CFG_TFSCL | Ring scales | {ring, direction, stage} |

The host-side system (PCIe, DMA, soft processor, driver software) is not
part of the RTL; these ports stand in for it.

## Departures from the published design

- The NTT takes 7511 cycles instead of about 7,200, because stages do not
  overlap.
- Main-core coefficient-wise operations take about 1,068 cycles instead of
  about 512, because each core handles one coefficient pair per cycle.
  Split/join and automorphism are close to the published figures.
- The memory is a uniformly multi-ported array. The BRAM/URAM port sharing
  and the 54/60-bit URAM bit packing are not modelled.
- Nine of the ten multipliers use Barrett reduction with any prime. Only q0
  is a published prime, and only RPAU 0 uses the add-shift reducer.
- Each twiddle unit stores all of its base-ring twiddles plus per-ring
  scales. The published unit stores "a few initial constants" and derives
  the rest; how it does so is not described.
- The published unit keeps initial constants for the two split rings and
  derives x^N + 1 from one of them. This design keeps only the
  x^N − ζ^N set and derives the other two by per-stage scales.
- The crossbar is used on both the read and the write side.
- These are this design's own, since none is published: the instruction
  encoding, the configuration map, the controller rules (masks, SYNC,
  SYNCC, clash priority), the ring beat format, and how Trivium output
  becomes a coefficient.
- Pipeline register layers between the SLRs of the FPGA are not
  replicated; the ring has one register per node.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…`. The reference values come from
`tb/tb_math_pkg.sv`, a package of 128-bit modular arithmetic, primitive
root search, bit reversal and direct polynomial evaluation. To run one:

    verilator --binary --timing --assert -Irtl -Itb \
      tb/tb_math_pkg.sv rtl/medha_pkg.sv tb/tb_rpau_main_core.sv \
      --top-module tb_rpau_main_core -Mdir obj -o sim && obj/sim

Other modules are found through `-Irtl`.

Sizes:

- The block testbenches of the large units shrink the parameters to keep
  runs short. `tb_rpau_main_core` and `tb_rpau` use N = 64, 4 cores and
  LAT = 4.
- `tb_medha_top` runs the whole accelerator with N = 64, 4 cores, 3 RPAUs
  and LAT = 4. It runs NTT, INTT, coefficient-wise ops, split/join,
  automorphism, broadcast, dyadic ops with on-the-fly keys, both
  controllers, SYNC and SYNCC. It counts stalls, overlap between the two
  groups and broadcast beats, and fails if any of these never occurs.
- `tb_medha_top_full` runs the top level at its full default size.
  Twiddle tables and random polynomials go into RPAU 0 (sparse q0) and
  RPAU 1 (a generic 60-bit prime). It then runs an NTT on both while the
  other controller runs a dyadic multiplication, then an inverse NTT.
  It checks NTT output slots against direct evaluation, the product, the
  round trip, and the 7511- and 4119-cycle counts.
  With plain Verilator it builds in about 8 minutes and simulates in
  about 1 minute. The NTT program measures 7514 cycles: 7511 busy cycles
  plus issue and END.
