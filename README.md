# A small Saber co-processor built around a striding Toom-Cook multiplier

Saber is a lattice key-encapsulation scheme based on Module Learning With
Rounding. Almost all of its work is one operation: the inner product of a
vector of three polynomials of degree 256 with a vector of small "secret"
polynomials, taken modulo `x^256 + 1` and modulo `2^13`. Saber's modulus is a
power of two, so the number-theoretic transform cannot be used. This design
uses Toom-Cook-4 instead, in its **striding** form. The polynomial is split
into four interleaved sub-polynomials rather than four consecutive quarters.
Each of the seven Toom-Cook point products is then itself a negacyclic
product of length 64. Each one fits in 64 words of local memory, and the
`x^256 + 1` reduction comes almost for free.

Around this multiplier sits a plain instruction-driven co-processor:
- an 8 KB dual-port data memory (1024 x 64 bit);
- a command controller that runs 24-bit instructions;
- units for hashing, sampling, rounding, packing, comparing and copying.

A host shifts instructions in over a 207-bit scan chain. It runs key
generation, encapsulation and decapsulation as sequences of these
instructions.

The RTL is SystemVerilog-2017 and synthesizable, with parameter defaults at
the full Saber size (n = 256, l = 3, q = 2^13, p = 2^10). Every module has a
self-checking testbench. One testbench takes the complete chip through a
full-size vector multiplication and the other instructions, through the
serial port.

## 1. Striding Toom-Cook: the arithmetic

### Splitting

Put `y = x^4`. Every polynomial of 256 coefficients splits into four
sub-polynomials of 64 coefficients, interleaved:

```
A(x) = A0(y) + x*A1(y) + x^2*A2(y) + x^3*A3(y),    Aj(y) = sum_t a[4t+j] * y^t
```

Coefficients `a[4t], a[4t+1], a[4t+2], a[4t+3]` sit side by side, so one
64-bit memory word (four 16-bit lanes) holds index `t` of all four
sub-polynomials. This is what makes the addressing simple everywhere else.

Toom-Cook-4 treats `A0..A3` as the four coefficients of a cubic in a new
variable `z`, where `z` stands for `x`. It evaluates the cubic at seven
points, multiplies pointwise, and interpolates the degree-6 result. This
design uses the points of the Saber reference implementation, numbered as
in the evaluation data path:

| output | point | value |
|---|---|---|
| aw1 | infinity | a3 |
| aw2 | 2 | a0 + 2a1 + 4a2 + 8a3 |
| aw3 | 1 | a0 + a1 + a2 + a3 |
| aw4 | -1 | a0 - a1 + a2 - a3 |
| aw5 | 1/2, scaled by 8 | 8a0 + 4a1 + 2a2 + a3 |
| aw6 | -1/2, scaled by 8 | 8a0 - 4a1 + 2a2 - a3 |
| aw7 | 0 | a0 |

Every weight is a power of two, so evaluation is only shifts and adds
(`toom_eval`). The public polynomial is evaluated in 16-bit arithmetic. The
secret, whose coefficients lie in [-4, 4], needs only 8 bits: the largest
value is 15 x 4 = 60.

### Why striding saves memory

Each point product `Wi(y) = Aw_i(y) * Bw_i(y)` would normally have 127
coefficients. In the strided split, though, the final reduction modulo
`x^256 + 1` is a reduction modulo `y^64 + 1`. Each point product can
therefore be reduced modulo `y^64 + 1` at once, as a **negacyclic** product
of 64 coefficients. It never needs more than 64 words.

After interpolation, the seven parts `C0..C6` of the product combine into
the four sub-polynomials of the result:

```
R_j = C_j + y*C_{j+4}    (j = 0, 1, 2)          R_3 = C_3        (all mod y^64 + 1)
```

Since `y*C(y)` modulo `y^64 + 1` is "shift by one index, negate what wraps",
result word `t` is:

```
lane j of word t = C_j[t] + C_{j+4}[t-1]        t >= 1
lane j of word 0 = C_j[0] - C_{j+4}[63]
```

So word `t` needs the interpolated values of index `t` and of index `t-1`,
and word 0 needs index 63. The output stage keeps the previous index in a
register. It writes words 1..63 as they appear, then word 0 last.

### Lazy interpolation

The Saber product is a sum of three polynomial products. Both evaluation and
interpolation are linear, so the three point products can be summed in the
point domain and interpolated once. The seven point multipliers accumulate
into their C memories for n = 1 and 2. The 70-cycle interpolation runs once
per inner product, not three times.

## 2. The point multiplier and its schedule

Each of the seven `point_mul` instances computes one negacyclic product of
64 x 64 coefficients:
- A: 16 bit, unsigned modulo 2^16;
- B: 8 bit, signed;
- the result is added into (or written to) 64 coefficients of C.

All seven run in lockstep on identical address sequences. Only instance 0
drives the cache addresses; an assertion checks that the others agree.

### Systolic chain of MACs

The multiplier has `NMAC` = 4 multiply-accumulate units. It handles four
coefficients of B per *pass*, so there are 64/4 = 16 passes. In pass `p`,
with `j = 4p`, the coefficients `b[j..j+3]` sit in registers. The A
coefficients `a[t]` stream past once, one per cycle, each broadcast to all
four MACs. The partial sums move down a register chain
`res[3] -> res[2] -> res[1] -> res[0]`:

```
res[k] <= res[k+1] + a[t] * b[j+k]          (res[3] takes C[t+j+3] instead of res[4])
```

`res[k]` then always holds output index `t + j + k`. A value entering at the
top with the old `C[m]`, `m = t+j+3`, collects
`a[t]b[j+3] + a[t+1]b[j+2] + a[t+2]b[j+1] + a[t+3]b[j]` over four cycles.
It leaves from `res[0]` and is written back to `C[m]`. The writes trail the
reads by three indices, so a pass never reads a word it has not finished
writing. `t` runs from -3 to 66, and `a[t]` is forced to zero outside 0..63.
This lets the chain fill and drain without special cases.

### Negacyclic wrap

Output index `m` runs up to 126. Index `m >= 64` stands for `-C[m-64]`,
because `y^64 = -1`. Bit 6 of the index is therefore a sign bit:
- bits 5:0 address the cache;
- bit 6 selects the two's complement of the value read and of the value
  written.

No separate reduction pass exists. In the first pass of a fresh product
(not accumulating), the old C value is replaced by zero.

### Cycle budget

One pass takes:

| phase | cycles | what happens |
|---|---|---|
| load B | NMAC/2 = 2 | two 8-bit B coefficients per 16-bit word read |
| prime | NMAC = 4 | chain filling (t = -3..0) and read latency |
| stream | 64 | one a[t] per cycle |
| drain | NMAC - 1 = 3 | the last sums leave res[0] |

That is 73 cycles per pass. Sixteen passes take

```
64/n * (n/2 + n + 64 + n - 1) = 16 * 73 = 1168 cycles        (n = NMAC = 4)
```

This is the same expression as the published point-multiplier latency, and
the testbench checks it exactly. A larger even `NMAC` that divides 64
shortens the product roughly in proportion. It costs NMAC multipliers of
16 x 8 bits per point, and the pass must read NMAC/2 B words.

### The cache

`polymul_cache` holds everything the seven multipliers need. Each cache word
is 112 bits: seven lanes of 16, one per point.

| array | depth | contents |
|---|---|---|
| A/B | 96 | words 0..63: evaluated A (7 x 16 bit, one index per word); words 64..95: evaluated B, two indices per word (7 x 2 x 8 bit) |
| C | 64 | accumulated point products (7 x 16 bit) |

The A/B array has one read/write port and one read port. A is read on one
port while B is read on the other. The C array has one read and one write
port, because the multiplier reads index `m` while writing index `m - 3`.

Together with the 8 KB data memory, this is 8192 + 1344 + 896 bytes, or
10.1875 KB of storage on the chip.

## 3. Interpolation

`toom_interp` takes the seven accumulated point values of one index and
returns the seven coefficients of the product polynomial in `z`. It follows
the Saber reference sequence:
- shifts and adds undo the powers of two in the evaluation points;
- the three odd divisions, by 3, 9 and 15, become multiplications by their
  inverses modulo 2^16: 43691, 36409 and 61167.

Every quotient it forms is exact over the integers. Multiplying by the
inverse therefore gives the quotient modulo 2^16. The power-of-two
divisions are right shifts: at most three bits in total (`>> 1`, `>> 2`,
`>> 3`). Each shift loses the corresponding top bits, so the results are
exact modulo `2^(16-3) = 2^13`. That is exactly Saber's modulus q, and it is
why the multiplier works in 16-bit lanes.

The datapath is a pipeline of five register stages plus a combinational
last step, and it accepts one index per cycle. The interpolation phase
works like this:
1. It reads C index 0..63, one per cycle.
2. The first result leaves the pipeline six cycles after its read.
3. The fold adds `C_{j+4}` from the previous index.
4. It writes words 1..63, then word 0.

In all, 70 cycles.

## 4. Sequencing one vector product

`vvmul_fsm` runs, for each polynomial pair n = 0..L-1: **Load A**, then
**Load B**, then **Eval Mul**. After the last pair it runs **Interp**, and
it ends in **Idle**.

- **Load A_n.** `bit_unpacker` (W = 13) turns the 52 packed words of A_n
  into 64 beats of four 13-bit coefficients. One beat per cycle goes through
  `toom_eval` into A/B cache word t. It takes 66 cycles.
- **Load B_n.** The 16 words of the secret (4-bit sign-magnitude, 16 per
  word) are unpacked the same way. `sm_to_2c` converts them to two's
  complement, and an 8-bit `toom_eval` evaluates them. Two indices are
  packed per cache word. It takes 66 cycles.
- **Eval Mul_n.** All seven point multipliers run together, accumulating
  for n > 0. It takes 1168 cycles.
- **Interp.** 70 cycles, once.

One polynomial pair costs 1300 cycles. A full inner product with l = 3 costs
`3 * 1300 + 70 - 1 = 3969` cycles from start to the `done` pulse, and the
testbenches check this number.

Operands (this design's layout):

| where | contents |
|---|---|
| Offset1 | L packed A polynomials, 52 words each, 13-bit little-endian bit packing (opcode 0111); or 40 words each, 10-bit (opcode 1000) |
| Offset2 | L secret polynomials, 16 words each, 4-bit sign-magnitude (bit 3 = sign) |
| Offset2 + 16L | result: 64 words, coefficient 4t+j in lane j of word t, mod 2^13 |

Saber needs products in two moduli:
- `A s` uses the 13-bit matrix A (mod q).
- `b^T s'` and `b'^T s` use vectors that are stored 10-bit packed (mod p) in
  the public key and the ciphertext.

Because p divides q, the same arithmetic serves both: a mod-p result is the
low 10 bits of the mod-q one. Only the operand format differs. The
multiplier therefore has two shift-register decoders, 13-bit and 10-bit.
The opcode chooses which one feeds the evaluation path, so packed key
material is read where it lies.

The published area breakdown lists such a byte-to-polynomial (mod p)
converter, BS2POLVECp, as a block of its own. No instruction of its own is
printed for it, and this design places it here.

## 5. The co-processor around it

### Instructions

An instruction is 24 bits: `op[3:0]`, `Offset1[13:4]` and `Offset2[23:14]`.
The offsets are word addresses in the data memory.

| op | name | unit | what it does (lengths in 64-bit words) | cycles |
|---|---|---|---|---|
| 0000 | Mem Wr | controller | writes the frame's data word to Offset1 | 1 |
| 0001 | Mem Rd | controller | returns the word at Offset1 in the next status frame | 2 |
| 0010 | SHA | `sha3_shake` | SHA3-256, SHA3-512 or SHAKE-128; descriptor at Offset1, output to Offset2 | 2 per input word, 24 per permutation, 1 per output word |
| 0011 | Sampler | `binomial_sampler` | 32 words of random bytes -> 16 words of secret coefficients HW(b[3:0]) - HW(b[7:4]) | 48 |
| 0100 | AddPack | `add_pack` | ((v + 4 - 512m) mod 1024) >> 6, packed 16 per word | 96 |
| 0101 | AddRound | `add_round` | (x + 4) >> 3 on 64 words of 16-bit lanes | 65 |
| 0110 | Unpack | `unpack` | 40 words of packed 10-bit values -> 64 words of lanes | ~66 |
| 0111 | VVMul | `vvectormul` | inner product above, 13-bit packed A | 3969 |
| 1000 | VVMul-p | `vvectormul` | the same with 10-bit packed operands (40 words each) | 3969 |
| 1001 | Verify | `verify` | compares 64 words, ORs any difference into a sticky flag; Offset1 = Offset2 clears it | 65 |
| 1010 | Copy | `copy_words` | copies 64 words | 65 |
| 1011 | CMOV | `cmov` | copies 64 words if the flag is set, always with the same timing | 128 |
| 1100 | SHAKE (outside input) | — | accepted and completed with no effect | 1 |

The controller gives the data memory's two ports to the unit it started,
through the multiplexer `mem_bus`, and stays busy until that unit's `done`.
An instruction that arrives while the controller is busy is dropped. The
host sees `busy` in the status frame and must wait.

### Host interface

`serial_to_parallel` is a 207-bit shift register. `serial_if` gives the
frame its meaning:

| bits | meaning |
|---|---|
| 23:0 | instruction |
| 87:24 | Mem Wr data |
| 151:88 | Mem Rd data (captured) |
| 152 | busy (captured) |
| 153 | Verify flag (captured) |
| 206:154 | reserved |

The host protocol:
1. Shift in 207 bits with `scan_en`; each new bit enters at the top and the
   bottom bit leaves on `scan_out`.
2. Pulse `scan_update` to issue the instruction.
3. Pulse `scan_capture` to load status and read data into the frame. The
   next shift brings them out while the next frame goes in.

### Other units

- **SHA3/SHAKE** (`sha3_shake`, `keccak_round`) is a sponge with one
  Keccak-f[1600] round per clock.
  - The command is a descriptor word holding mode, input length and output
    length; the input words follow it.
  - Input is whole 64-bit words. Every hash input in Saber is a multiple of
    8 bytes.
- **Binomial sampler** is combinational: two 4-bit Hamming weights and a
  subtraction per byte. A small sequencer around it feeds it words.

## 6. Where this design stops and where it departs

The parts below are choices of this design, not features of the published
chip:

- **Layouts and formats.** These are all this design's own:
  - the scan-frame layout;
  - the opcodes 0111 and 1000 for the two multiplication modes;
  - the SHA descriptor word;
  - the memory layouts of every unit.

  The published chip gives only the instruction fields, the opcode list and
  the 207-bit length.
- **Interpolation.** It uses the reference sequence of operations, with
  inverses of 3, 9 and 15. It is not a gate-for-gate copy of any published
  datapath drawing.
- **Cycle count.** A polynomial pair takes 1300 cycles here against the
  1298 reported for the silicon. The point multiplication matches the
  reported formula exactly; the two extra cycles are in loading.
- **SHAKE with outside input (1100)** is not built.
- **Physical parts are not modelled:** the SRAM macro (written here as an
  array), supply decoupling, pads, clocking and any power management.
- **The host sequence** for key generation, encapsulation and decapsulation
  is not part of the RTL. `b = A^T s` needs each column of A stored
  contiguously, so the host gathers a column with three Copy instructions.
  Decapsulation is tight in the 1024-word memory. The re-encrypted
  ciphertext has to be compared one row at a time, and s' has to be written
  over s.

Key generation has been run on the full-size chip (`tb_saber_keygen`), in
these steps:
1. Expand A with SHAKE-128.
2. Sample s.
3. For each of the three columns of A:
   - gather the column with three Copy instructions;
   - run one vector product;
   - run AddRound.

The core is busy for 14112 cycles. The silicon is reported to take
89.6 µs at 160 MHz, which is 14336 cycles, for the whole key generation.
That figure also includes packing and hashing the public key, which the
host does in this test.

Encapsulation has been run the same way (`tb_saber_encaps`), in these
steps:
1. Hash the message and the public key with SHA3-256, then both together
   with SHA3-512.
2. Expand A and the noise with SHAKE-128, and sample s'.
3. Compute the three rows of `b' = round(A s')`.
4. Compute `v' = b^T s'` directly from the packed key.
5. Run AddPack.

The core is busy for 18126 cycles, against 18704 cycles reported for the
whole operation. Packing b' and the final key hashes are left out.

Decapsulation is run in `tb_saber_decaps`. It needs a real key pair and
ciphertext, so the test first runs key generation and encapsulation on the
chip, and then runs decapsulation twice: once with the true ciphertext and
once with one bit of c_m flipped. Each decapsulation has these steps:
1. Compute `v = b'^T s` straight from the packed ciphertext, as a mod-p
   product.
2. Recover the message. No unit here does this:
   `m' = ((v + h2 - 2^6 c_m) mod 2^10) >> 9`, with h2 = 228, is computed by
   the host from v.
3. SHA3-512 of m' and the hash of the public key.
4. Re-encryption: noise, s' written over s, `v' = b^T s'`, AddPack.
5. For each row of b': one vector product, AddRound, Unpack of the received
   row, and Verify against it. The last Verify also covers m' and c_m.
6. CMOV swaps the pre-key for the secret z if any Verify found a difference.

The memory plan uses 994 of the 1024 words:
- The received rows are unpacked one at a time into a scratch buffer.
- Rows 0 and 1 share one buffer, because each row is verified as soon as it
  is made.
- Row 2, m' and c_m are written over the packed public key once v' is done.

The test checks that:
- the decrypted message equals the encapsulated one;
- the Verify flag is 0 for the true ciphertext and 1 for the altered one;
- CMOV keeps the key or substitutes z.

The first decapsulation keeps the core busy for 22269 cycles, against
23392 reported.

| operation | vector products | simulated core cycles | reported (160 MHz) |
|---|---|---|---|
| key generation | 3 | 14112 | 14336 (89.6 µs) |
| encapsulation | 4 | 18126 | 18704 (116.9 µs) |
| decapsulation | 5 | 22269 | 23392 (146.2 µs) |

## 7. Verification and simulation

Every module in `rtl/` has a testbench `tb/tb_<module>.sv`. Each one:
- computes its expected values independently, in the testbench, from the
  mathematical definition (schoolbook negacyclic products, reference
  interpolation, FIPS 202 test vectors for the hash);
- prints `TB_RESULT checks=N failures=M`;
- ends itself with a watchdog.

Latency checks:
- 1168 cycles for `point_mul`;
- 5 pipeline cycles for `toom_interp`;
- 66/66/1168/70 cycles per phase and 3969 cycles in all for `vvectormul`.

`tb_saber_top` runs the whole chip at its default parameters, over the
serial interface only. It checks the following:
- Mem Wr and Mem Rd;
- a hash;
- sampling, AddRound, Unpack and AddPack;
- a full l = 3 vector multiplication in both operand formats, each against
  a schoolbook model;
- Copy, Verify setting and clearing the flag, and both CMOV cases;
- an instruction dropped while busy.

Each of these mechanisms is counted, and one that never happened counts as
a failure.

`tb_saber_keygen` and `tb_saber_encaps` run the key generation and the
encapsulation described in section 6. They check these results against
schoolbook models:
- the rounded vectors b and b';
- the packed c_m.

They also check that the core cycles stay within the reported operation
times.

`tb_saber_decaps` runs key generation, encapsulation and decapsulation one
after another. It checks that the message decrypts and that a tampered
ciphertext is rejected, as described in section 6.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/saber_pkg.sv \
          tb/tb_saber_top.sv --top-module tb_saber_top -Mdir obj_top
./obj_top/Vtb_saber_top
```

Replace `saber_top` with any other module name to run its testbench. Every
testbench finishes in a few seconds.

## 8. Files

| file | role |
|---|---|
| `saber_pkg.sv` | widths, opcodes, unit indices, SRAM request struct, multiplier states |
| `saber_top.sv` | the chip |
| `serial_to_parallel.sv`, `serial_if.sv` | scan-chain host interface |
| `cmd_controller.sv`, `mem_bus.sv` | instruction sequencing and memory ownership |
| `data_sram.sv` | 1024 x 64 dual-port memory |
| `vvectormul.sv`, `vvmul_fsm.sv` | vector multiplier and its sequencer |
| `bit_unpacker.sv`, `sm_to_2c.sv` | operand decoders |
| `toom_eval.sv`, `point_mul.sv`, `toom_interp.sv`, `polymul_cache.sv` | Toom-Cook datapath and cache |
| `sha3_shake.sv`, `keccak_round.sv` | hash |
| `binomial_sampler.sv`, `add_pack.sv`, `add_round.sv`, `unpack.sv`, `verify.sv`, `cmov.sv`, `copy_words.sv` | the other Saber operations |

To change the design, edit the main parameters:
- `vvectormul.L`: the rank, 2, 3 or 4 for LightSaber, Saber or FireSaber.
  All three values pass the multiplier testbench. A vector product then
  takes `L*1300 + 69` cycles, and its operands take `68*L + 64` words.
  The chip instantiates the multiplier at L = 3, and the rank is not an
  instruction field.
- `NMAC` (MACs per point multiplier);
- the widths in `saber_pkg`.

The unit testbenches override parameters only where that shortens a run.
