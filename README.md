# A Paillier encryption engine built from compact Montgomery multipliers

Federated learning systems protect the gradients and model updates they exchange with
additively homomorphic encryption. The usual choice is the Paillier cryptosystem. Every
value is encrypted as `c = g^m * r^n mod n^2` and decrypted as
`m = L(c^lambda mod n^2) * mu mod n`, with `L(u) = (u-1)/n`. With a 1024-bit key these are
modular exponentiations of 2048-bit numbers: about 2,600 modular multiplications for an
encryption and about 1,500 for a decryption. Each multiplication depends on the one before
it, so a single en/decryption parallelises badly. The values to encrypt, however, come by
the thousand.

This design therefore puts its effort into a **small, fully pipelined modular multiplier**.
It builds a complete Paillier processor around that one multiplier and replicates the
processor. Throughput comes from running many independent requests side by side, not from
speeding up a single request:

```
                 +--------------------------- he_accel_top ---------------------------+
 cfg (key) ----->|  broadcast to every processor                                      |
                 |                 +----------------+                                 |
 req stream ---->|  dispatcher --->| paillier_proc 0|---+                             |
                 |     |           +----------------+   |                             |
                 |     +---------->| paillier_proc 1|---+--> collector ---> rsp stream |---->
                 |     |           +----------------+   |    (round robin, batch       |
                 |     +---------->|      ...       |---+     count)                   |
                 |                 +----------------+                                 |
                 +--------------------------------------------------------------------+

  paillier_proc:  mont_modmult (mont_pe + mont_q_unit, 3 x karatsuba_mul = 9 DSP)
                  local_store, sparse_buffer, rng_xorshift, int_divider, sequencer
```

All RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`, one module or package per file. The
self-checking testbenches are in `tb/`.

## 1. The arithmetic the hardware performs

Large integers are arrays of 32-bit words, least significant word first. Every modular
operation reduces to the Montgomery product

    MM(a, b) = a * b * R^-1 mod M,      R = 2^(32*N),  N = words of M,  M odd.

Values are kept in Montgomery form `xR mod M`. A value enters that form as `MM(x, R^2)`
and leaves it as `MM(x, 1)`. An exponentiation `A = A^e (B)` is left-to-right
square-and-multiply with base `B`. Leading zero bits of `e` are skipped, so it costs
`bitlen(e) + popcount(e) - 1` products. A processor runs one of two fixed programmes
(modulus n^2 unless marked):

| step | encryption                            | decryption                                  |
|------|---------------------------------------|---------------------------------------------|
| 0    | draw r (r < n) from the RNG           | `B = MM(c, R^2)`                            |
| 1    | `B = MM(g, R^2)`                      | `A = MM(R^2, 1)`                            |
| 2    | `A = MM(R^2, 1)`                      | `A = A^lambda (B)`                          |
| 3    | `A = A^m (B)`, m read from the sparse buffer | `A = MM(A, 1)` (leave Montgomery form) |
| 4    | `B = MM(r, R^2)`                      | `T = (A - 1) / n` on the divider            |
| 5    | `A2 = MM(R^2, 1)`                     | `A = MM(T, mu)` mod n                       |
| 6    | `A2 = A2^n (B)`                       | `A = MM(A, R'^2)` mod n (R' = 2^(32*words of n)) |
| 7    | `A = MM(A, A2)`                       | output A = m                                |
| 8    | `A = MM(A, 1)`, output A = c          |                                             |

So an encryption costs `6 + E(m) + E(n)` products and a decryption `5 + E(lambda)`, where
`E(e) = bitlen(e) + popcount(e) - 1`. The step 5-6 trick of decryption forms
`T * mu mod n` without leaving Montgomery form twice: `MM(MM(T, mu), R'^2) = T * mu mod n`.

The host precomputes the constants that do not depend on the message and writes them once
per key: `n`, `n^2`, `g`, `R^2 mod n^2`, `R'^2 mod n`, `lambda`, `mu`, the word counts of
`n` and `n^2`, and `-n^-1`, `-(n^2)^-1 mod 2^32`.

## 2. The word-serial Montgomery multiplier (`mont_modmult`)

This is the heart of the design and where nearly all cycles are spent.

### Algorithm

With radix 2^32, N words, and `M' = -M^-1 mod 2^32`:

```
S = 0
for i = 0 .. N-1:                       outer loop, one word Y^i of Y
    q = ((S^0 + X^0 * Y^i) * M') mod 2^32
    carry = 0
    for j = 0 .. N:                     inner loop, X^N = M^N = 0
        t     = X^j * Y^i + q * M^j + S^j + carry
        S^(j-1) = t mod 2^32            (the j = 0 word is zero and dropped)
        carry = t >> 32
    S^N = carry
if S >= M: S = S - M
```

The inner loop body is one **processing element** (`mont_pe`): two multipliers (`x*y` and
`q*m`), an adder for the two products and `S^j`, and a last stage that adds the carry.
Only one PE exists. Inner iterations are issued to it **one per clock**, and the outer
loop is pipelined: iteration `(i+1, 0)` follows `(i, N)` directly. The ideal time is
therefore `N(N+1)` clocks, i.e. two multiplications per clock on a single PE.

### PE timing

Operands `x, y, q, m` are presented in clock `t0`:

| clock  | what happens                                                      |
|--------|-------------------------------------------------------------------|
| t0     | operands registered in both Karatsuba multipliers                 |
| t0+3   | products ready; `S^j` is read from the partial-sum buffer and added |
| t0+4   | the carry of the previous iteration is added (or 0 if `c_clr`)     |
| t0+5   | `s_out` and the new carry are valid                               |

The only feedback loop is the carry addition in the last stage, one adder deep. That is
what allows an issue every clock. The widest addition is 66 bits: `x*y + q*m + s_in` can
reach 2^65.

### Why the partial sum needs only one buffer

Iteration `(i, j)` reads `S^j` of the previous outer iteration. That word was written by
`(i-1, j+1)`, which was issued N clocks earlier and left the PE 5 clocks after issue. For
N of 10 or more the write is long done. For shorter operands the q wait below stretches
the outer iteration to at least 11 clocks. One buffer `sb[0..N]` is overwritten in place.

### The quotient digit, computed ahead (`mont_q_unit`)

`q` for outer iteration `i+1` needs only word `S^0` of the new partial sum. That word
leaves the PE right after inner iteration `(i, 1)`, long before the inner loop of `i` ends.
The q unit starts `X^0 * Y^(i+1)` when outer iteration `i` begins. It then forms
`(S^0 + low word) * M'` as soon as `S^0` appears, using the same pipelined multiplier
twice. Its result is ready `max(start + 8, S^0 + 5)` clocks after its inputs.

The issue logic waits at `j = 0` only if q is not ready. This happens for the very first
digit (about 8 clocks) and, for short operands, every outer iteration. Such waits are
counted on `q_stall`. The third multiplier brings the total to three 32x32 Karatsuba
multipliers, i.e. **nine DSP slices per ModMult**.

### Final subtraction and result

After the pipeline drains, `S - M` is formed word by word with a borrow (N+1 clocks). If
there is no final borrow, the difference is the result (`sub_taken`). Otherwise `S` is the
result. The comparison is `S >= M`, so the result is always fully reduced.

### Cycle count

`N(N+1)` issue clocks plus about `N + 16` for the first q, the drain, the subtraction and
`done`:

| operand | N  | ideal N(N+1) | measured (testbench) |
|---------|----|--------------|----------------------|
| 2048 b  | 64 | 4160         | 4239 (+1.9%)         |
| 1024 b  | 32 | 1056         | within 10%           |

The controller is a one-hot FSM: IDLE, RUN, DRAIN, SUB, DONE (`he_pkg::mm_state_e`).
Operands are written word by word through a load port while idle. The modulus has its
own write enable, so it can stay loaded. The result is read by word index after `done`.

## 3. The Karatsuba multiplier (`karatsuba_mul`)

A 32x32 product is split into halves. It uses three products, `ah*bh`, `al*bl` and
`(ah+al)*(bh+bl)` (16x16, 16x16, 17x17), instead of four. Each product fits one DSP slice.
There are three pipeline stages: operand split, products, recombination. The multiplier
takes a new pair every clock and has a latency of 3 clocks.

## 4. The Paillier processor (`paillier_proc`)

A processor owns one ModMult, a random number generator, an integer divider, a sparse
plaintext buffer and a private word memory. It serves one request at a time and shares
nothing with the other processors.

**Local store (`local_store`).** 13 slots of `NW_MAX` words: n, n^2, g, R^2 mod n^2,
R'^2 mod n, lambda, mu, ciphertext, ModExp base, two accumulators, r, scratch. It has one
write port and three synchronous read ports. Two ports feed the operands and one the
modulus or exponent, so a ModMult is loaded in `N + 2` clocks and stored back in `N`.
A sixteenth slot address reads as the constant 1 without occupying memory. For 2048-bit
operands the copying adds about 3% to each multiplication. On an FPGA the three read
ports mean a duplicated block RAM.

**Sparse plaintext (`sparse_buffer`).** The numbers federated learning encrypts are
encoded floating-point values. They have few non-zero words compared with a 1024-bit
integer. An encryption request therefore carries only its non-zero words with their
indices, and the processor stores up to `SPARSE_ENTRIES` (8) (index, value) pairs. A read
by index returns the stored word, or 0 if that index is absent. The exponent scan of
`g^m` starts at the highest non-zero word, so the zero words cost nothing. If more
non-zero words arrive than fit, the result comes back with `err` set.

**Random r (`rng_xorshift`).** A 32-bit xorshift generator gives one word per clock. The
top word of r is masked below the leading one of n's top word, so `r < n`. The words above
n's length are written as zero. The generator is not cryptographically secure; see
section 7.

**Divider (`int_divider`).** Restoring long division, one quotient bit per clock over the
2048-bit dividend (about 2,050 clocks per decryption, against about 6.7 million for the
exponentiation).

**Sequencer.** A state machine walks the programme of section 1. For each product it
copies the operands into the multiplier, starts it, and writes the result back. For
exponentiations it fetches exponent words one at a time and scans their bits. The first
one bit only loads the accumulator, by copying the base. After that, every bit costs a
square and every one bit a further multiply.

## 5. The processor array and its interfaces (`he_accel_top`)

**Configuration (`cfg`).** A write port of one word per clock, broadcast to all
processors: `{we, slot, idx, data}`. Slots 0-6 are the key integers. Slot 15 carries the
scalars: `nw_n`, `nw_nsq`, `-n^-1`, `-(n^2)^-1`. Write it only while all processors are
idle; an assertion checks this.

**Requests (`req_*`, valid/ready).** Beats of `{op, tag, idx, data, last}`:
- An encryption sends the non-zero plaintext words, each with its word index. An
  all-zero plaintext is sent as one zero word.
- A decryption sends all ciphertext words.
- The 16-bit tag comes back with the result.

**Dispatcher.** The first beat of a request goes to the lowest-numbered idle processor.
All beats up to `last` follow it there. While every processor is busy the stream is held
(`dispatch_stall`).

**Results (`rsp_*`, valid/ready).** Beats of `{tag, idx, data, err, last}`, words in
ascending order. An encryption returns all words of n^2 and a decryption all words of n.

**Collector.** Round-robin arbitration across processors, holding the grant until a
result's `last` beat, so results are never interleaved. `collect_contention` marks a grant
made while several processors were waiting.

**Batches.** The host works in fixed-size batches, one kernel call each.
`batch_start` with `batch_len` starts a count, and `batch_done` rises when that many
results have left.

**Events.** `evt[p]` gives one-clock strobes per processor: product done, q wait, final
subtraction, division done, encryption/decryption done, sparse overflow.

The host link and the board memory a real card places in front of these streams (PCIe,
DRAM, the host's number encoder and batching) are outside this RTL.

## 6. Parameters

| parameter        | default | where            | meaning |
|------------------|---------|------------------|---------|
| `NPROC`          | 4       | top              | number of Paillier processors |
| `NW_MAX`         | 64      | top, processor, ModMult, store, divider | largest modulus in 32-bit words; 64 holds n^2 of a 1024-bit key |
| `SPARSE_ENTRIES` | 8       | top, processor   | non-zero plaintext words per encryption |
| `SEED`           | 0x2545F491 (xor'ed with a per-processor constant) | processor | RNG seed |
| `K`              | 32      | pe, Karatsuba, q unit | word size; the package fixes 32 |

Keys smaller than the maximum run on the same hardware: the word counts are run-time
values. Raising `NW_MAX` to 128 or 192 gives 2048- or 3072-bit keys. The local store and
operand buffers grow linearly with it, and the time per product grows with its square.
`NPROC` scales throughput linearly, limited only by FPGA area.

## 7. How far it can be trusted, and where it departs

Verified in simulation:
- Each unit against independently computed values: wide-integer reference arithmetic
  in `tb/tb_paillier_pkg.sv`.
- Paillier encryption and decryption with n of 32, 64 and 128 bits on one processor.
- The whole array at default parameters with 64- and 128-bit keys.
- One full-size round trip with a 1024-bit key. It takes 2613 products in 11.4 M clocks
  for the encryption and 1532 products in 6.7 M clocks for the decryption, about 4370
  clocks per 2048-bit product including load and store.

Not verified: timing closure (the original target is 500 MHz on an FPGA with DSP
slices), resource counts on a real device, and any host link.

Choices made here where the original description is silent or differs:
- **Decryption reduces mod n.** The last step of decryption is `... * mu mod n`.
  Reducing mod n^2, as one formula in the original text reads, would not return m.
- **Final comparison `S >= M`** rather than `S > M`, so a result equal to M is reduced.
- **Control and interfaces are this design's own.** Examples are the PE and q-unit
  pipeline depths (the original's 4-word example has a 4-clock inner iteration; the PE here
  takes 5, which changes latency but not the one-per-clock issue rate), the single time-shared multiplier of the q unit, the Montgomery-form
  programme, the slot map, the beat protocols, the processor count, the sparse-buffer size
  and the divider type.
- **RNG.** xorshift is a placeholder with the right interface. Real use needs a
  cryptographic source, and r should be checked to be coprime with n, which is not done.
- **No `g = n+1` shortcut.** `g^m` is computed as a full exponentiation for any g. With
  `g = n+1` it equals `1 + m*n mod n^2`, which would remove `E(m)` products.
- **Circuit notes.** Two adders are wider than 64 bits: the 66-bit PE sum, and the
  divider's full-width compare. The divider's compare is kept because it runs once per
  decryption.

## 8. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. Each has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert rtl/he_pkg.sv tb/tb_paillier_pkg.sv \
    rtl/*.sv tb/tb_mont_modmult.sv --top-module tb_mont_modmult -Mdir obj -o sim
./obj/sim
```

(`rtl/he_pkg.sv` must come first. Add `-Wno-fatal` if your Verilator version turns width
warnings into errors.)

| testbench             | what it shows |
|-----------------------|---------------|
| `tb_karatsuba_mul`    | products of random and corner operands, latency 3 |
| `tb_mont_pe`          | the PE's word and carry against a reference, with back-to-back issue |
| `tb_mont_q_unit`      | q digits and their latency for S^0 arriving early or late |
| `tb_mont_modmult`     | products for N = 1..64 words, final subtraction taken and not, clock count within 10% of N(N+1) |
| `tb_local_store`      | three read ports, synchronous read, constant-one slot |
| `tb_sparse_buffer`    | zero words dropped, lookup by index, top index, overflow, clear |
| `tb_rng_xorshift`     | sequence against a model, reseed |
| `tb_int_divider`      | quotients and remainders of up to 2048/1024-bit numbers |
| `tb_paillier_proc`    | ciphertexts against `g^m r^n mod n^2`, round trips, product counts, overflow flag |
| `tb_dispatcher`, `tb_collector` | routing, locking, round robin, back-pressure, batch count |
| `tb_he_accel_top`     | 41 requests through 4 processors with back-pressure; every mechanism counted |
| `tb_he_accel_full`    | top at default parameters, 1024-bit key, encryption and decryption, about 25 s |

The reference key pairs (n of 32, 64, 128 and 1024 bits) are in `tb/tb_paillier_pkg.sv`.
