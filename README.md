# A parameterisable TFHE processor in SystemVerilog

TFHE is a fully homomorphic encryption scheme: it computes on encrypted data
without decrypting it. Its central operation is *programmable bootstrapping*
(PBS). PBS evaluates an arbitrary lookup table on an encrypted value and also
resets the encryption noise. PBS dominates the run time of every TFHE program,
and it needs a large key (tens of megabytes) that is read again for every
ciphertext.

This RTL implements a processor core that runs TFHE programs from a stream of
instructions rather than accelerating one operation. Each instruction carries
the memory addresses of its operands. The core fetches the ciphertexts, lookup
tables and keys itself and writes the results back. The host therefore only
sends short instructions. Two execution units do the work:

* **`pbs`** runs programmable bootstrapping with sample extraction. It
  bootstraps several ciphertexts as a batch, so that each piece of the
  bootstrapping key, once fetched, is used for the whole batch.
* **`ks_muladd`** has two modes. It performs a key switch, which returns a
  bootstrapped ciphertext to the original key and dimension. It also performs
  a *MulAdd*, `s0·x + s1·y` on two ciphertexts, which is the linear part of a
  TFHE program.

All arithmetic is exact, modulo the 64-bit prime q = 2^64 − 2^32 + 1. Polynomial
products use a number-theoretic transform (NTT), not a floating-point FFT.

The default parameters are the standard TFHE set: LWE dimension n = 500,
polynomial size N = 1024, k = 1, decomposition level ℓ = 2 and base 2^10. The
datapath handles T = 2 coefficients per cycle. All of these are parameters.

## TFHE in one page

* An **LWE ciphertext** is a vector `(a_0 … a_{n-1}, b)` of integers mod q.
* An **RLWE ciphertext** is a pair (k+1 = 2) of polynomials of degree < N, mod
  X^N + 1. Multiplying by X^a rotates the coefficients, and each coefficient
  that wraps past the top changes sign ("negacyclic").
* The **bootstrapping key** BSK is n RGSW ciphertexts. BSK_i is stored here as
  (k+1)·ℓ rows × (k+1) polynomials, already in the NTT domain.
* **PBS** of an LWE `(a, b)`:
  1. Switch a and b to Z_2N by rounding. These are `ã_i` and `b̃`.
  2. Set the accumulator to the lookup-table polynomial times X^(−b̃).
  3. For i = 0 … n−1, set `acc ← CMUX(BSK_i, acc, acc·X^(ã_i))`. This is
     computed as `acc + (X^(ã_i) − 1)·ExtProd(acc, BSK_i)`.
  4. Sample-extract coefficient h of the accumulator. The result is an LWE
     ciphertext of dimension k·N.
* The **external product** ExtProd splits every accumulator coefficient into ℓ
  signed digits ("gadget decomposition"). It transforms the digit polynomials to
  the NTT domain, multiplies them point-wise by the key rows, sums over the
  rows and transforms back.
* The **key switch** maps the dimension-kN result back to dimension n:
  `(0,…,0,b) − Σ_i Σ_j decomp(a_i)_j · KSK_{i,j}`.

## Data flow through the PBS unit

```
 command  ──► command buffer chain ──► batch of up to BATCH commands
                                           │
 LWE words ──► modulus switch ──► mask store (a_i of every ciphertext)
 LUT words ──► poly_rotate (×X^(−b)) ──► accumulator store acc[c]
                                           │
            ┌────────── n iterations ──────┴─────────────────────┐
            │ acc[c] ──► br_iteration(a_i[c], BSK_i) ──► acc[c]   │
            │  (ciphertexts of the batch in turn, each re-issued   │
            │   as soon as its previous result is written back)    │
            └──────────────────────────────────────────────────────┘
                                           │
 acc[c] ──► poly_rotate (extract at h) ──► result words at ret_addr
```

Inside `br_iteration` (one CMUX step, streaming):

```
 acc ─┬─► extra latency ─► ext_product ─┬────────────────► poly_rotate (×X^a) ─► ADD ─► acc'
      │                                 │                                        ▲
      └─► accumulator buffer chain ─► SUB (acc − ExtProd) ─► difference buffer ──┘
```

Inside `ext_product`:

```
 acc words ─► decompose ─► ℓ × ntt ─► multi_poly_buffer ─► (k+1)ℓ × ew_mul ─► adder tree ─► intt
                                   (replayed k+1 times)      ▲ key rows
```

Every unit streams T coefficients per clock. An RLWE ciphertext is
(k+1)·N/T words, sent polynomial 0 first and in natural coefficient order. The
NTT output is in bit-reversed order, but the key is stored in that same order,
so no reordering network is needed. The inverse transform takes bit-reversed
input and returns natural order.

## The streaming NTT

This is the unit with the least obvious behaviour. `ntt` is a pipeline of
log2(N/T) buffered stages, followed by a fully parallel T-point stage.

* **Buffered stages (`ntt_sdf_stage`).** Each stage is a single-path
  delay-feedback stage for span h (N/2, N/4, …, T), built as follows:
  * While the first half of a block of 2h coefficients arrives, it is stored in
    a buffer of h/T words.
  * While the second half arrives, each word is combined with the stored word
    in T Cooley–Tukey butterflies. The upper results go out at once and the
    lower results go back into the buffer.
  * The buffer then drains while the next block's first half fills it.
  * One twiddle per block is read from a ROM: ψ^bitrev(m) for group
    m = N/(2h) + block.
* **Parallel stage (`ntt_par_stage`).** Once the span is smaller than T, all
  remaining butterflies of a word lie inside that word. `ntt_par_stage` computes
  them combinationally, with log2 T levels of T/2 butterflies, and registers the
  result.
* **Inverse transform (`intt`).** It is the mirror image: the parallel stage
  first, then delay-feedback stages with Gentleman–Sande butterflies of growing
  span. An optional final multiplication by N^−1 is controlled by `RESCALE`.
  Inside the external product `RESCALE = 0` is used, so the key must be
  pre-multiplied by N^−1.

Throughput is one polynomial every N/T cycles, with no gaps between
polynomials. The latency of the forward NTT is (N/T − 1) + log2(N/T) + 1 cycles,
which the NTT testbench checks.

The twiddle factors are not stored as a file. They are computed during
elaboration from ψ = 7^((q−1)/2N), a primitive 2N-th root of unity mod q:

* forward twiddle: ψ^e
* inverse twiddle: ψ^(−e) = −ψ^(N−e)

where e = bitrev(m). Each ROM builds a table of ψ^i by repeated
multiplication, so filling a ROM costs N multiplications.

**Difference from the published design.** The published architecture gives
stage i an output buffer of ¾·N/2^i values. It sends one quarter of the values
straight to the next stage. This implementation uses the textbook
delay-feedback buffer of ½·N/2^i values and has no bypass. It uses fewer
storage words, but its schedule differs from the published one, so the
published cycle counts for the NTT do not apply exactly.

## Arithmetic (`tfhe_pkg`, `mod_mul`)

* **Multiplication.** A 64×64 product uses two levels of Karatsuba: three
  33-bit products, each built from three 17-bit products.
* **Full reduction.** The 128-bit product is reduced with the Solinas identities
  2^64 ≡ 2^32 − 1 and 2^96 ≡ −1 (mod q). Splitting v = a·2^96 + b·2^64 + c·2^32 + d
  gives v ≡ (b + c)·2^32 + d − a − b. A short chain of conditional subtractions
  then brings the result into [0, q).
* **Simple reduction.** Additions and subtractions need at most one correction
  by q.
* **Decomposition (`decompose`).** Each coefficient is rounded to its top ℓ·logβ
  bits and split into ℓ digits, from the least significant upwards. A digit of
  β/2 or more becomes digit − β and carries one into the next digit. Negative
  digits are stored as q − |d|. Digit 0 is the most significant.

## The PBS unit (`pbs`)

A command holds the input LWE address, LUT address, return address, key index
and extract index h. Commands wait in a FIFO ("buffer chain"). A batch starts
in either of two cases:

* BATCH commands are waiting;
* commands are waiting and no new command is offered.

The batch then runs through five phases: POP, LOAD, INIT, ROTATE (n
iterations) and EXTRACT.

* **Key traffic.** During ROTATE all accumulators of the batch stream through
  one `br_iteration` back to back. The key element BSK_i is therefore fetched
  once per ciphertext of the batch, within a window of BATCH·(k+1)·N/T cycles.
  A larger batch gives the memory more time to deliver BSK_{i+1}.
* **Accumulator feedback.** The accumulators live in one store with a slot
  per ciphertext. Each slot has a ready flag and an iteration counter. When
  the last word of ciphertext c's iteration i has been written back, c may
  start iteration i+1. The issue pointer cycles over the batch, so the
  iteration output is fed straight back to its input.
* **When the pipeline stays full.** If BATCH·(k+1)·N/T cycles are at least
  the iteration latency (about 3000 cycles at the defaults), ciphertext 0 is
  ready again by the time the last one of the batch has been issued. Then
  there are no gaps. A full batch of four at the defaults takes 2,075,843
  cycles, or about 519k cycles per PBS. The streaming bound is
  500·4·1024 = 2,048,000 cycles. A lone PBS, or a batch too small to cover
  the latency, waits for its own result each iteration.

**Memory layout** (word = T coefficients, word addresses, 64-bit address space):

| object | layout |
|---|---|
| input LWE | ⌈(n+1)/T⌉ words: a_0 … a_{n−1}, b, zero padded |
| lookup table | (k+1)·N/T words, polynomial 0 first |
| BSK word (key, i, o, c) | address key·n·(k+1)·N/T + (i·(k+1)+o)·N/T + c; holds word c of output polynomial o for all (k+1)·ℓ rows of BSK_i, NTT domain (bit-reversed), scaled by N^−1 |
| PBS result | k·N/T mask words, then one word with b in lane 0 |

**Modulus switch.** This design's own choice: the switch to Z_2N keeps the top
log2(2N) bits of each coefficient, with rounding.

## Key switch and MulAdd (`ks_muladd`)

The key is stored negated, so the whole key switch is one accumulation that
starts from (0,…,0,b).

**Key switch.** Output coefficients are produced KS_LANES at a time. For each
group of output coefficients, the unit:

1. streams all k·N input coefficients, one per cycle;
2. decomposes each coefficient (ℓ digits);
3. multiplies the digits with ℓ × KS_LANES key entries;
4. sums over the digits in an adder tree;
5. accumulates the result.

The key word for (group g, input i) is at key·G·kN + g·kN + i, where
G = ⌈(n+1)/KS_LANES⌉. Its entry [j][lane] is −KSK_{i,j}[g·KS_LANES + lane], and
index n is the body.

**MulAdd.** With `is_ks = 0` the accumulator is bypassed. The same multipliers
and tree compute `s0·x[m] + s1·y[m]` for two LWE ciphertexts of dimension n.
A subtraction uses the scalar q − 1.

At the defaults a key switch takes about 257k cycles. That is less than the
PBS unit needs per ciphertext, so the key switch keeps up with bootstrapping.

## The processor top (`tfhe_processor`)

**Instructions** (`tfhe_pkg::instr_t`) hold:

* a 2-bit opcode: PBS, MULADD or KS;
* three 64-bit addresses;
* the extract index h;
* a key index and two 64-bit scalars. These are additions to the minimal
  instruction format, needed for several keys and for MulAdd.

**Dispatch.** Instructions enter a FIFO and are dispatched in order. If the
next instruction goes to the same unit as the last one, it is issued at once.
If it goes to the other unit, dispatch waits until that other unit has
finished all its work. This enforces read-after-write order between the units,
for example a key switch that reads a PBS result. It also means the two units
never overlap across a change of unit.

**Status.** `retired` counts finished instructions.

**Memory ports.** Each unit brings out a data read port, a key read port and a
write port. Every read returns its data exactly one cycle after the request,
and no port can stall. In a full system these ports would connect to
high-bandwidth memory through an interconnect. That memory system, the host
link and the host-side controller are not part of this RTL.

## Departures from the published design, in one list

* NTT buffers are ½ of the stage size with no bypass, where the published
  design uses ¾ with a one-quarter bypass.
* The default batch size is 4. The published minimum of 9 applies to T = 32.
* Modulus switching, all memory layouts, buffer depths and the one-cycle
  memory model are this design's own choices.
* The key-switch/MulAdd unit is built from a functional description. The
  published prototype did not implement it. Its lane count, key layout and
  MulAdd operand format are this design's own.
* The instruction has extra fields (key index, two scalars). Dispatch uses a
  simple hazard rule.

## Verification

Every module has a self-checking testbench in `tb/`. The testbenches compare
against independent reference code in `tb/tb_ref_pkg.sv`, which provides:

* 128-bit `%` arithmetic;
* an O(N²) direct negacyclic transform and a textbook NTT;
* decomposition, rotation, CMUX and sample extraction written directly from
  their definitions.

| testbench | what it runs |
|---|---|
| `tb_mod_mul`, `tb_bf_unit`, `tb_ew_mul`, `tb_ew_addsub`, `tb_block_adder_tree`, `tb_decompose`, `tb_sync_fifo` | random and corner-case operands |
| `tb_ntt`, `tb_intt` | back-to-back polynomials at N = 64 / 32; latency check |
| `tb_multi_poly_buffer`, `tb_poly_rotate`, `tb_ext_product`, `tb_br_iteration` | reduced N (16–32), several ciphertexts back to back |
| `tb_pbs` | N = 16, n = 4, batch of 2: five bootstraps, two keys, full and partial batches |
| `tb_ks_muladd` | key switches with two keys; MulAdds including a subtraction |
| `tb_tfhe_processor` | end to end at reduced size: a dependent PBS → KS → MulAdd → PBS program in one shared memory. It counts full and partial batches, accumulator feedbacks, negacyclic wraps, hazard stalls, key switches, MulAdds and subtractions, and fails if any count is zero |
| `tb_tfhe_full` | the top at its default parameters (n = 500, N = 1024): a full batch of four PBS instructions (4 × 1025 output coefficients) against the reference, with a cycle bound for the full pipeline; about one minute in Verilator |

To simulate, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/tfhe_pkg.sv tb/tb_ref_pkg.sv \
    $(ls rtl/*.sv | grep -v tfhe_pkg) tb/tb_pbs.sv --top-module tb_pbs
./obj_dir/Vtb_pbs
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<m>`.

**Not verified.** The large parameter set (N = 16384, n = 800, ℓ = 5,
logβ = 6) is reachable through parameters but has not been simulated. No timing
or resource figures for this RTL are given here. A synthesis run of the
full-size top did not complete within ten minutes: the on-chip stores are
written as plain arrays, and no memory macros are mapped.
