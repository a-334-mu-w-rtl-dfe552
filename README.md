# A compact Saber KEM accelerator with a striding Toom-Cook multiplier

Saber is a lattice-based key-encapsulation mechanism: module learning with
rounding, rank l = 3, polynomials of 256 coefficients, moduli q = 2^13,
p = 2^10 and T = 2^4. Almost all of its arithmetic is one operation: the
product of a 3-element vector of polynomials with another such vector in
Z_q[x]/(x^256 + 1). This accelerator is built around a multiplier for that
operation that is small rather than fast. It does not use an NTT, which
Saber's power-of-two modulus does not allow. Instead it uses Toom-Cook
4-way splitting with two refinements:

* **Striding**: the polynomial is split by the residue of the coefficient
  index modulo 4, not into four contiguous quarters. Each group of four
  consecutive coefficients then feeds one evaluation step, so every
  operand is read sequentially from memory. The reduction modulo x^256 + 1
  also becomes a reduction modulo y^64 + 1 (with y = x^4) in the small
  products, so no double-length intermediate values exist.
* **Lazy interpolation**: Toom-Cook evaluation and interpolation are
  linear. So the seven point products of all three polynomial pairs of a
  vector product are summed in place, and only the sum is interpolated,
  once per vector product instead of three times.

Around the multiplier sits a microcoded datapath. A host sends 24-bit
micro-instructions over a serial link. Each instruction starts one block,
and that block works between two regions of a 1K x 64-bit dual-port system
memory. The same hardware therefore runs key generation, encapsulation and
decapsulation, with the sequence of steps kept in the host.

## Instructions and the system memory

An instruction is `{offset2[23:14], offset1[13:4], op[3:0]}`. Offset1 is
the input region and offset2 the output region; both are word addresses.
The vector multiplier needs two inputs: it reads the public operand at
offset1 and the secret at offset2, and writes after the secret.

| op   | block       | reads                                        | writes                      |
|------|-------------|----------------------------------------------|-----------------------------|
| 0000 | Mem Wr      | next 64-bit serial data word                 | word at offset2             |
| 0001 | Mem Rd      | word at offset1                              | serial output, 64 bits      |
| 0010 | SHA3/SHAKE  | external core (ports `sha_*`)                | external core               |
| 0011 | Sampler     | 256 bytes at offset1                         | 256 secrets, 4-bit, offset2 |
| 0100 | Addpack     | v' (16-bit) at offset1, message at offset2   | c_m (4-bit) at offset2+4    |
| 0101 | AddRound    | A·s (16-bit) at offset1                      | 10-bit packed at offset2    |
| 0110 | Unpack      | v (16-bit) at offset1, c_m at offset2        | message bits at offset2+16  |
| 0111 | VectorMul   | row of A (13-bit, 52 words each) at offset1  | 16-bit result at offset2+48 |
| 1000 | BS2PolVecP  | 10-bit packed polynomial at offset1          | 16-bit containers, offset2  |
| 1001 | Verify      | 136 words at offset1 and at offset2          | `verify_fail` flag          |
| 1010 | Copy        | 4 words at offset1                           | offset2                     |
| 1011 | CMOV        | 4 words at offset1                           | offset2 if `verify_fail`    |
| 1100 | SHAKE (ext) | external core, second mode (`sha_ext`)       | external core               |
| 1101 | VectorMul   | column of A (polynomials 156 words apart)    | as 0111                     |
| 1110 | VectorMul   | 16-bit public operand (b or b'), 64 words each | as 0111                   |

Opcodes 0000–0110 and 1001–1100 are the published table. The codes for
the multiplier variants and BS2PolVecP are this design's own choice; the
source gives none.

Polynomials are packed LSB first: bit 0 of word 0 is bit 0 of coefficient
0, and coefficients follow one another with no gaps. The formats are:

* 13-bit elements of R_q, 52 words;
* 10-bit elements of R_p, 40 words;
* 4-bit two's-complement secrets or c_m, 16 words;
* 16-bit containers, 64 words;
* 1-bit messages, 4 words.

A secret vector takes 48 words, so its three polynomials sit at offset2,
offset2+16 and offset2+32. The multiplier writes its result right after
them, at offset2+48.

### Serial link

The host drives `s_in`, one bit per clock while `s_valid` is high, LSB
first. While `s_cmd` is high, 24 bits make an instruction; while it is low,
64 bits make a data word. An instruction is accepted only while `ready` is
high, and `ready` drops until the instruction has finished. Mem Wr
therefore takes the instruction followed by the data word. Mem Rd answers
with 64 bits on `s_out`, flagged by `s_out_valid`. The framing and the bit
order are this design's own; the source says only that a serial link is
converted to the 64-bit bus.

## The vector multiplier

`polymul` computes sum over p = 0..2 of A_p · s_p in Z_(2^13)[x]/(x^256+1).
It is made of:

* a public and a secret decoder (`coeff_decoder`);
* the evaluation datapath (`tc_eval`);
* seven MAC units (`tc_mac_unit`);
* the interpolation datapath (`tc_interp`);
* two private SRAMs (`polymul_cache`);
* an FSM with states WAIT, LOAD_COEF, LOAD_SECRET, EVAL, MULT and INTERP.

### Striding split and evaluation

Write a(x) = a_0(y) + x·a_1(y) + x^2·a_2(y) + x^3·a_3(y) with y = x^4, so
that a_k[j] = a[4j + k]. The four coefficients of iteration j are
consecutive in memory and arrive together. They are evaluated as the
polynomial r0 + r1·z + r2·z^2 + r3·z^3 at seven points:

* z = infinity, 2, 1, −1 and 0;
* z = 1/2 and −1/2, both scaled by 8 so that all seven values stay integers.

Only shifts and two levels of adders are needed, so `tc_eval` has a
single register stage and accepts a group every cycle.

The public operand is evaluated with 16-bit arithmetic. It fills rows
0..63 of the 96 × 112-bit evaluation cache, one index per row, seven
16-bit values per row. The secret's coefficients lie in [−4, 4], so its
evaluated values fit in 8 bits. Two indices of seven 8-bit values go in
each of rows 64..95.

### Point multiplication and the MAC window

Each of the seven point products is a 64 × 64 negacyclic product modulo
y^64 + 1. A MAC unit holds four secret values b_j..b_j+3 and streams the
64 public values a_0..a_63 past them. At step i, the product a_i · b_(j+t)
belongs to result index i + j + t. The four multipliers therefore work on
four neighbouring result indices, and three registers hold the partial
sums of the indices still in progress. Each step:

1. The lowest index is finished and written back to the result cache.
2. The next index is read in from the cache.
3. Every product whose index passes 63 is subtracted instead of added,
   since y^64 = −1.

The multipliers are shift-and-add multipliers by the 8-bit signed secret
value.

For one group of four secret values, the controller runs these cycles:

| cycles | what happens                                       |
|--------|----------------------------------------------------|
| 0      | read the two secret rows from the cache            |
| 1–2    | load b (two values per cycle)                      |
| 3–5    | fill the window from the result cache              |
| 6–69   | 64 multiply-accumulate steps                       |
| 70–72  | flush the window                                   |

That makes 73 cycles per group and 16 × 73 = **1168 cycles** per point
multiplication. This matches the published budget of
64/n · (n/2 + n + 64 + (n − 1)) with n = 4 multipliers.

The result cache (64 × 112 bits) keeps seven 16-bit sums per index. Before
a vector product begins, a per-row valid bit is cleared, so each row reads
as zero until it is first written. The accumulation over the three
polynomial pairs therefore starts from zero without a clearing pass. This
is what makes the interpolation lazy.

### Interpolation

After the third pass, the 64 rows are read once. For each index the seven
sums are turned back into the seven coefficient polynomials of the
product. This uses:

* additions;
* shifts;
* multiplication by small constants;
* exact division by 3, 9 and 15, done as multiplication by the inverses
  modulo 2^16: 43691, 36409 and 61167.

Row i produces coefficients 4i..4i+6. The top three of them overlap the
next row and are carried forward. The carry out of row 63 wraps onto
coefficients 0..2 with a minus sign, because x^256 = −1. For that reason
word 0 is held back and written last.

The datapath has three register stages. Word i leaves three cycles after
row i is read, and the whole step takes 69 cycles; the published figure
is 70. Results are reduced to 13 bits and stored in 16-bit containers.

**Departure:** the interpolation listing in the original description doubles
r4 before subtracting 64·r6, and it reuses r8 as a temporary. Followed
literally, it does not reproduce the product. This RTL uses the standard
order from the Saber reference implementation instead: subtract 64·r6,
then double. It is the same interpolation matrix. The unit test checks
the output against schoolbook multiplication.

### Timing of one vector product

The testbench measures **3972 cycles** per row-column product:

* three evaluation passes of about 133 cycles each;
* 3 × 1168 MAC cycles;
* 69 cycles of interpolation.

The published worst case is 1298 cycles per multiplication (1168 + 60
evaluation + 70 interpolation). Here, with interpolation shared, it is
about 1324 cycles. The difference comes from evaluation. Both decoders
feed a single evaluation datapath through a 2:1 multiplexer, so the public
polynomial and then the secret are evaluated one after the other, each in
64 cycles plus start-up. The published 60 cycles match one polynomial's
evaluation.

## The coefficient-wise blocks

AddRound, Addpack, Unpack, BS2PolVecP and the binomial sampler share one
streaming engine, `coef_stream`, which works as follows:

1. A decoder on memory port A unpacks the first operand, four coefficients
   per cycle.
2. An optional second decoder on port B unpacks the second operand.
3. The owning block computes four result coefficients combinationally.
4. A packer writes the results back through port B. Writes take priority;
   the second decoder waits for them.

A polynomial takes about 70 cycles. Each block computes:

* **AddRound**: `((x + 4) mod 2^13) >> 3`, written as 10-bit packed (rounding
  q to p, with h1 = 4).
* **Addpack**: `((v' + 4 − 2^9·m) mod 2^10) >> 6`, written as 4-bit c_m.
* **Unpack**: `((v − 2^6·c_m + 228) mod 2^10) >> 9`, the recovered message
  bit (h2 = 228).
* **BS2PolVecP**: 10-bit packed in, 16-bit containers out.
* **Binomial sampler** (mu = 8): each input byte gives one secret,
  HW(low nibble) − HW(high nibble). Each Hamming weight is built from three
  half adders and a full adder, and the result is a 4-bit two's-complement
  value.

**Verify** reads two 136-word regions, one word of each per cycle. It ORs
their XOR into an accumulator, so its time does not depend on the data,
and raises `verify_fail` if any bit differed. **CMOV** reads and writes
all four words whatever the flag. It writes either the source word or the
old destination word back, so its timing does not depend on the flag.
**Copy** is the same block with the move forced.

## Clock gating

Every block runs on its own gated clock. A `clock_gate` captures the
enable on the falling edge of the clock and ANDs it with the clock, so
the gated clock has no glitches. The command controller raises a block's
enable one cycle before its start pulse, and drops it once the block
reports done. The system memory's clock runs only while the controller
is not idle. Inside the multiplier, its two caches have one more gate of
their own. It opens with the multiply instruction and closes when the FSM
returns to its wait state. So the caches are stopped even while the
multiplier's own clock is still enabled.

## What is outside the RTL

* **SHA3/SHAKE.** A standard Keccak core is used as is. The top exposes
  its gated clock, start, done, mode and offsets, and both memory ports
  (`sha_*`), so a core can be attached. The testbenches stand in for it
  with a model that only answers done.
* **Scan chain, pads, decoupling and package.** These belong to the test
  chip, not to the accelerator.
* **The instruction sequence** of KeyGen, Encaps and Decaps. It lives in
  the host.

## Memory budget

These sizes are in 64-bit words, taken from the Saber parameter set. The
peak working sets of the three operations fit in the 1024-word memory:

| operation | peak working set                                            | words |
|-----------|-------------------------------------------------------------|-------|
| KeyGen    | A 468, s 48, product 64, b packed 120, seeds 8              | 708   |
| Encaps    | A 468, s' 48, product 64, ciphertext 136, b as 16-bit 192, keys 12 | 920 |
| Decaps    | A 468, s' 48, product 64, received ct 136, new b' 120, pk b 120, m/z/keys 16 | 972 |

For Decaps, the 16-bit copy of b is made only after A is no longer
needed.

The workload test `tb_saber_pke` runs the arithmetic of Saber's
public-key encryption through the serial link:

* key generation: sampling, A^T·s, rounding;
* encryption: sampling, A·s', rounding, b^T·s', message encoding;
* decryption: b'^T·s, message decoding.

All of the data stays in memory at once, in words 0..987. Hash and XOF
outputs are supplied by the host model. The message must come back
unchanged. These are the cycles spent in the accelerator's own
instructions, without serial loading and without hashing:

| part    | instructions                                               | cycles | published total, with hashing |
|---------|------------------------------------------------------------|--------|-------------------------------|
| KeyGen  | 3 × Sampler, 3 × VectorMul (A^T), 3 × AddRound             | 12579  | 14642                         |
| Encrypt | 3 × Sampler, 3 × VectorMul, 3 × AddRound, 3 × BS2PolVecP, VectorMul (b), AddPack | 16964 | 18984 (Encaps) |
| Decrypt | 3 × BS2PolVecP, VectorMul (b'), Unpack                     | 4385   | 23388 (Decaps = re-encryption + decryption + hashing) |

## How far it is checked

Every block has a self-checking testbench in `tb/`. Each compares against
a model written independently of the RTL:

* the multiplier against schoolbook negacyclic products;
* the interpolation against products built by the testbench's own
  evaluation;
* the MAC unit against a 64 × 64 negacyclic product, with the cycle
  count checked at 1168;
* the coefficient blocks against the Saber formulas;
* the top, end to end, against the same models.

The top-level test `tb_saber_top` runs the unmodified top. It:

* loads operands over the serial link;
* runs every opcode, including all three multiplier variants;
* reads results back over the serial link;
* counts each mechanism: clock gating of the blocks and the memory,
  Verify pass and fail, CMOV move and keep, the external SHAKE mode, and
  the multiplier's lazy accumulation.

`tb_saber_pke`, the workload test above, checks b, b', c_m and the
decrypted message against a reference model.

Not checked: a whole KeyGen, Encaps or Decaps including the hashes. That
needs the Keccak core, which is not part of this RTL.

## Simulating

All files are SystemVerilog 2017; `rtl/saber_pkg.sv` holds the shared
types and constants. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/saber_pkg.sv \
          tb/tb_saber_top.sv --top-module tb_saber_top -Mdir build
./build/Vtb_saber_top
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`.
Replace `tb_saber_top` with any other `tb_<block>` to test one block. The
full-size top-level test runs in well under a second.

To change the design, note the following:

* Most sizes live in `saber_pkg`.
* The multiplier's memory layout (secret stride 16, result at +48) is in
  `polymul`.
* The cycle schedule of a MAC group is the `c_q` decode in `polymul`.
* Adding a coefficient-wise block means a new `coef_stream` client, an
  opcode in `saber_pkg`, and an entry in `cmd_ctrl`.
