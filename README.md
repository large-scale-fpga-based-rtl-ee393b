# Large-block privacy amplification with NTT multipliers and Mersenne-prime hashing

Privacy amplification is the last step of quantum key distribution post-processing. It
compresses a reconciled key X of N bits into a shorter key K of l bits, using a
universal hash function chosen by public random seeds. The shorter key is then secret
even against an eavesdropper who holds partial information about X. Finite-size effects
make very large blocks worthwhile: N of about 10^8 bits, with l a sizeable fraction of N.
The hash must therefore touch every bit of a 10^8-bit input and still produce tens of
millions of output bits.

This RTL implements a hybrid hash built for that job. The hardware only ever multiplies
two integers of about 756,839 bits and adds the products modulo the Mersenne prime
2^756839 - 1. Inputs and outputs of any size are built from those operations.

## The hash

Fix GAMMA = 756839. Then M = 2^GAMMA - 1 is prime.

* The input X is padded with zeros to n blocks x_1..x_n of GAMMA bits, each read as an
  integer mod M. A block equal to 2^GAMMA - 1 (that is, 0 mod M) is discarded and
  replaced by the key source. This happens with probability 2^-GAMMA.
* **DM3H part.** Seeds a_1 .. a_{n+m} are GAMMA-bit integers. Output block i is the sliding
  inner product

      y_i = sum_{j=1..n} a_{j+i-1} * x_j  mod M,     i = 1 .. m.

  Each y_i gives GAMMA key bits. Consecutive blocks reuse n-1 of the n seeds, Toeplitz
  style, so the seed length is n+m blocks, not n*m.
* **MMH-MH tail.** The output length l is rarely a multiple of GAMMA, so write
  l = m*GAMMA + l'. One more sum y_{m+1} is computed and hashed again with a
  multiply-shift hash over 2^GAMMA:

      z = top l' bits of ((b * y_{m+1} + c) mod 2^GAMMA),   b odd.

* K = y_1 || y_2 || ... || y_m || z.

Each block goes through up to (m+1)*n products of GAMMA-bit numbers. For N = 10^8 and
l = 0.1 N that is n = 133, m = 13, l' = 161093: 1862 products.

## Architecture

```
             key rows  seed rows
                |         |
      +---------v---------v------------------------------------------+
      |  pa_top (sequencer)                                          |
      |                                                              |
      |   +------------------ large_int_mul -----------------+       |
      |   |  ntt_core A  <--+                                |       |
      |   |  ntt_core B  <--+-- w_factor_rom (shared)        |       |
      |   |  pointwise multiplier (x N^-1)  -> A, then INTT  |       |
      |   +---------------------------|-----------------------+       |
      |               coefficients    |                              |
      |        +----------------------+--------------+               |
      |        v                                     v               |
      |   mmh_mod_acc  (sum mod 2^GAMMA-1)     mh_mod_acc (b*y+c)    |
      |        |   y_{m+1} fed back to A             |               |
      +--------|-------------------------------------|---------------+
               +--------------> key digits <---------+
```

Every product, DM3H or MH, goes through the single multiplier. The two accumulation units
consume its result one coefficient per clock.

### Number-theoretic transform

Operands are cut into 24-bit digits. A GAMMA-bit number has Q+1 = 31535 digits
(Q = GAMMA div 24 = 31534, and the top digit keeps only GAMMA mod 24 = 23 bits). A product
needs up to 63070 coefficients, so a 65536-point cyclic convolution is exact as long as
the upper half of both inputs is zero. Each operand can hold up to 32768 digits, which is
786432 bits.

The transform works modulo P = 2^64 - 2^32 + 1. Two properties of P make it cheap:

* Reduction needs no multiplier. 2^64 = 2^32 - 1 and 2^96 = -1 mod P, so a 160-bit value
  lo + mid*2^64 + hi*2^96 reduces to lo + mid*(2^32 - 1) - hi, followed by one
  conditional subtraction (`pa_pkg::fe_reduce160`).
* 2 has order 192, so 2^12 is a primitive 16th root of unity. A radix-16 butterfly
  therefore multiplies only by powers of two: the term x_t * w16^(t*k) is x_t shifted
  left by 12*t*k mod 192 bits (`radix16_butterfly`). The inverse butterfly is the same
  sum read out in reverse order, y_inv[k] = y[-k mod 16].

A convolution coefficient is at most 32768 * (2^24 - 1)^2 < 2^63 < P. It is therefore
recovered exactly, with no wraparound.

`ntt_core` keeps the 65536 points in 16 RAM banks of 4096 words. A radix-16 pass works
on one hexadecimal digit of the point index: a butterfly group is the 16 points that
differ only in that digit. `ntt_addr_map` puts point i in bank (sum of its hex digits)
mod 16, at address i >> 4. Changing one digit through 0..15 then visits all 16 banks,
so any group, and any row of 16 consecutive points, is read and written in one clock
without bank conflicts. A transform is 4 passes of 4096 groups: 16384 clocks.

* **Forward transform:** decimation in frequency. The butterfly runs first, then output
  k of a group at offset j inside its sub-transform of length L is multiplied by
  w_N^(k*j*N/L). Input is in natural order, output in digit-reversed order.
* **Inverse transform:** decimation in time. The twiddle multiplies input t first, then
  the butterfly runs with the inverse root. Input is digit-reversed, output natural.

Both operands end the forward transform in the same permuted order. The pointwise
product can therefore be taken in place, and the inverse transform restores natural
order with no reordering pass. The 1/N of the inverse is folded into the pointwise
multiplier.

`w_factor_rom` holds w_N^e for e = 0..N-1, where w_N = 0xDC9218A86D10F3A3 is a primitive
65536th root of unity chosen so that w_N^4096 = 2^12. That choice keeps the ROM
consistent with the shift-only butterfly. The ROM serves 16 lookups per clock, with
negated exponents for the inverse. Both cores run their forward transforms in lock step
and share the ROM; an assertion checks that the second core never needs different
twiddles.

`large_int_mul` timing at the default size, from `start` to the `done` pulse:
2*16384 + 4096 + 3 = 36867 clocks. Loading the operands takes another 4096 clocks, one
row of 16 digits per clock.

### Modular accumulation (the hard part)

The product v of two GAMMA-bit numbers is below 2^(2*GAMMA). Since 2^GAMMA = 1 mod M,

    v mod M = (v mod 2^GAMMA) + floor(v / 2^GAMMA)    (mod M)

so each product is added to the running sum as two GAMMA-bit halves. `mmh_mod_acc` does
this in one pass over the coefficients c_0 .. c_{2Q+1}, one per clock:

1. **Carry resolution.** t = c_i + carry, the product digit is d_i = t mod 2^24, and
   carry = t >> 24 (at most 41 bits).
2. **Low half.** For i <= Q, d_i is added to accumulator digit i. Digit Q is masked to
   23 bits.
3. **High half.** GAMMA is not a multiple of 24, so the high half starts 23 bits into
   digit Q. For i > Q, high digit k = i-Q-1 is (d_i:d_{i-1}) >> 23, a one-step funnel
   fed by the previous digit. It is added to accumulator digit k.
4. **End-around carry.** One adder carry runs through both halves. The carry out of the
   low half's top digit is exactly the carry that 2^GAMMA = 1 sends into digit 0 of the
   high half. Whatever carry is left at the end is kept as `pending` and enters the next
   product's pass at digit 0.

A pass takes 2Q+2 = 63070 clocks. After the n-th product, a normalisation pass adds
`pending` back in (repeating if that wraps again). It then rewrites 2^GAMMA - 1 as 0, so
the output is the canonical residue. The accumulator is stored as 16 banks of 24-bit
digits, so a whole row can be read to feed y_{m+1} back into the multiplier.

`mh_mod_acc` is the same carry-resolution datapath over digits 0..Q only. Seed c is
preloaded into its store, every carry past bit GAMMA-1 is dropped, and a funnel reads
out bits GAMMA-l'+24k and up.

### Sequencing (`pa_top`)

For each output block i (the (m+1)-th only when l' > 0) and each input block j:

1. Request x_j and a_{j+i} and load them into core A and core B. Rows past the block are
   zero, and bits past `last_bits` in the last block are cleared (the padding).
2. If x_j is all ones, request it again with `x_req_reload` set and reload core A only.
3. Multiply, then accumulate; the sum restarts at j = 1.

After the n-th product the sum is normalised. Blocks 1..m are streamed out. For the tail,
c is loaded into `mh_mod_acc`, y_{m+1} (from the accumulator) and b are multiplied, and
the top l' bits are streamed out.

**Interfaces.** All ports are synchronous to `clk`. `rst_n` is an active-low asynchronous
reset.

* `x_req` / `s_req` are one-cycle request pulses carrying a block index and, for seeds,
  a kind: A, B or C.
* The source answers with the block's 1971 rows of 16 little-endian 24-bit digits, on
  `x_valid`/`x_row` and `s_valid`/`s_row`, with any gaps.
* During an operand load, a row is taken only in a clock where both valids are high. The
  key and seed streams must therefore be delivered in step.
* There is no backpressure.
* The key leaves as 24-bit digits: `key_valid`, `key_nbits` valid low bits, `key_last`
  on the final digit. Each block is sent least significant bit first, y_1 first, z last.

**Cost per job.** Each product takes about 104,000 clocks: 4096 load + 36867 multiply +
63070 accumulate. Add about 31,500 clocks per normalisation and per output block. The
full-size test job (n=2, m=1, l'=1000: five products) takes 598,649 clocks.

## Sizes and limits

| Parameter | Default | Meaning |
|---|---|---|
| `GAMMA` | 756839 | block length; 2^GAMMA-1 must be prime and GAMMA mod 24 must not be 0 |
| `LOGN16` | 4 | NTT size N = 16^LOGN16 = 65536; 2*(GAMMA/24+1) <= N is asserted |

n, m, l' and `last_bits` are 32-bit run-time inputs. Key and seeds are streamed in, so
on-chip storage does not grow with the job:

* two cores of 65536 x 64-bit words (8 Mbit);
* the 65536 x 64-bit twiddle ROM (4 Mbit);
* two GAMMA-bit digit stores.

A 10^8-bit input at output/input ratios 0.1, 0.25 and 0.375 needs 133 key blocks and
14, 34 or 50 sums respectively. A 10^9-bit input needs 1322 key blocks. All of these fit
the counters.

For smaller experiments, any Mersenne exponent with GAMMA mod 24 != 0 works. The tests
use GAMMA = 2203 with LOGN16 = 2 (256 points).

## How far this follows the original design, and where it departs

Taken from the published description:

* the DM3H / MMH-MH construction and the sequence of the algorithm (padding, split,
  reload of an all-ones block, m+1 sums, MH on the last sum);
* GAMMA = 756839;
* P = 2^64 - 2^32 + 1 with 2^12 as the 16th root;
* 24-bit points in a 65536-point, 4-pass radix-16 NTT;
* two parallel cores sharing a twiddle ROM, each with 16 RAMs, a butterfly followed by a
  twiddle multiplier, and a write-back loop;
* a pointwise multiplier;
* an MMH accumulator that folds the product modulo 2^GAMMA - 1, and an MH accumulator.

Choices made here, where the description is silent:

* The digit-sum bank mapping.
* DIT for the inverse transform, run on core A.
* The twiddle root and the full-table ROM.
* The digit-serial accumulation datapath, with its pending end-around carry and
  canonicalisation pass. The original figure for this unit was not available.
* Both interfaces and the bit order of K.
* Skipping the (m+1)-th sum when l' = 0.
* Using n+m seeds. The algorithm indexes a_{j+i-1} up to i = m+1, while the family
  definition lists n+m-1 seeds.

Two numbers in the source conflict:

* The block length is also quoted as 756864. That is not a Mersenne exponent (it is
  even), so 756839 is used.
* The NTT size is quoted once as 65,535 points. The 4-pass radix-16 transform implies
  65536, which is used.

Not modelled:

* Where the key and seeds live (on-chip memory, DRAM or a host link).
* How l, and from it m and l', is derived from the QKD parameters. These are inputs.
* Throughput. No clock frequency is published, so throughput cannot be compared cycle
  for cycle. At an assumed 250 MHz, the per-product cost above gives about 130 Mbit/s
  of input for 10^8 bits at ratio 0.1. This is an estimate, not a measurement.

Implementation limits:

* Each NTT pass reads, transforms and writes back a group in one clock, from
  asynchronous RAM reads. An FPGA build would pipeline this path and use synchronous
  block RAM, with care for read-after-write between passes.
* Loading, multiplying and accumulating do not overlap.
* The twiddle table is filled by a 65536-step initial loop. A synthesis tool whose
  constant evaluator has a step limit may refuse it; the remedy is a precomputed memory
  image or a smaller two-level table with one extra multiplier per lane.

## Verification

Every module in `rtl/` has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=F` and has a cycle watchdog. References are computed
independently, in `tb/pa_ref_pkg.sv`:

* GF(P) arithmetic with a plain 128-bit `%`;
* bit-array big integers;
* schoolbook products;
* end-around folding.

| Testbench | What it checks |
|---|---|
| `tb_radix16_butterfly` | 400 random and near-P vectors against a direct 16-point DFT, forward and inverse |
| `tb_w_factor_rom` | full-size table: root order, w^4096 = 2^12, random forward and inverse entries |
| `tb_ntt_addr_map` | every group of every digit and every row is conflict-free; the placement is one-to-one |
| `tb_ntt_core` | 256 points: forward equals the direct DFT in digit-reversed order; inverse returns N*x; 2*16 busy cycles |
| `tb_large_int_mul` | 256 points: exact linear convolution for full, short and all-ones operands; latency 2*2*16+16+3 |
| `tb_mmh_mod_acc` | 3-product sums mod 2^2203-1; restart; 2^GAMMA-1 normalises to 0; 2Q+2 cycles per product |
| `tb_mh_mod_acc` | top l' bits of (b*y+c) mod 2^2203 for l' = 1, 24, 25, 1000, GAMMA-1; Q+1 cycle pass |
| `tb_pa_top` | 3 jobs at GAMMA = 2203 (see below) |
| `tb_pa_workloads` | output/input ratios 0.1, 0.25 and 0.375 on a 45-block (98435-bit) input at GAMMA = 2203, bit-exact |
| `tb_pa_top_full` | one job at the default sizes, bit-exact against the reference; about 2 minutes of simulation |

`tb_pa_top` runs three jobs: (n=3, m=2, l'=500, padded), (n=2, m=0, l'=37) and
(n=1, m=1, l'=0). It uses a stalling source and a forced all-ones block. It counts the
reload, stall, padding, multi-block, DM3H-output, MH-tail and no-tail cases, and fails if
any of them never happened.

`tb_pa_workloads` repeats the paper's three compression ratios on a smaller scale. The
block count is 45 and the last block is padded. Each key is compared with the reference
bit for bit.

Besides the testbench checks, the RTL carries assertions for the handshake rules. They
check that no operand is loaded while the multiplier is busy and that no accumulation
starts while the accumulator is busy. They also check that no two points of one
butterfly group share a bank.

`tb_pa_top_full` runs n=2, m=1, l'=1000 with the last block padded. Its operands are
sparse so that the reference stays fast.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    --top-module tb_pa_top rtl/pa_pkg.sv tb/pa_ref_pkg.sv tb/tb_pa_top.sv
./obj_dir/Vtb_pa_top
```

The small testbenches set `GAMMA`/`LOGN16` through parameters; the full-size one uses
the defaults.
