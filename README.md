# CryptRISC crypto execution path: field-aware operand masking for RISC-V scalar crypto

Scalar cryptography instructions make a RISC-V core fast at AES, SHA-2, SM3 and
SM4. They also concentrate the secret-dependent switching in a few wide
datapaths, where power analysis can read it. CryptRISC answers this inside the
pipeline. Each crypto instruction's source operands are randomised (masked)
before they reach the execution unit. The kind of mask is chosen per
instruction, from the algebra the instruction works in:

| algebra of the instruction | typical operations | mask |
|---|---|---|
| GF(2): bitwise logic | SHA-256/512 sigma0/sigma1, SM3 P0 | Boolean, x ⊕ m |
| GF(2^8): finite-field arithmetic | AES rounds and key schedule, SM4 | affine, A·x ⊕ B per byte |
| Z/2^n: modular arithmetic | SHA-256/512 sum0/sum1, SM3 P1 (their results feed the modular additions of the compression rounds) | arithmetic, x + m mod 2^64 |

All three masks are special cases of one affine map, x' = A·x + B. A single
masking engine therefore serves every instruction: it only changes which
"multiply" and which "add" it uses.

This repository holds synthesizable SystemVerilog for the part of such a core
that is new: the scalar crypto decoder, the field detection table, the masking
policy registers, the mask generator, the masking engine, the crypto functional
unit, and a six-stage pipeline shell with forwarding around them. The base
core (fetch, the integer ALU, load/store, caches and CSRs) is not included.
Its register-file traffic enters through a plain write port instead.

## An instruction's journey

```
 in_instr ──► R1 ──► decode ──► R2 ──► register read ──► RX ──► CFU ──► R3 ──► R4 ──► register file
 (cycle 1)   IF    + field tag   ID    + forwarding       │      EX     MEM    WB
                   + mask policy       + masking engine   │
                                       (fresh PRNG bits)  └── masked operands and their masks
```

| cycle | stage | what happens | register written at the end |
|---|---|---|---|
| 1 | IF | the instruction is handed over (`in_valid_i`/`in_ready_o`) | R1 |
| 2 | ID | `crypto_decoder` finds the operation, `field_detection_layer` its field, `mask_config` the MASK_MODE and MASK_SHARES | R2 |
| 3 | RR | register file read, forwarding, `masking_control_unit` masks both operands | RX |
| 4 | EX | `crypto_functional_unit` computes the result from the masked operands | R3 |
| 5 | MEM | the result passes (crypto instructions do not access memory) | R4 |
| 6 | WB | register write; `wb_*_o` reports the retirement | – |

An instruction accepted at clock edge *t* writes its result at edge *t*+5,
unless it was held by a hazard stall. The masking metadata (2-bit MASK_MODE
and 2-bit MASK_SHARES) is attached in ID. It travels with the instruction to
retirement and is reported on `wb_mode_o` and `wb_shares_o`.

The MCU-to-CFU register (RX) is where the masked operands sit as the only copy
of the data. No unmasked operand is registered after RR.

## Field detection and masking policy

`field_detection_layer` is a table from operation to field tag:

| operations | tag | MASK_MODE |
|---|---|---|
| aes64es/esm/ds/dsm/im/ks1i/ks2, sm4ed, sm4ks | GF(2^n) | `10` affine |
| sha256sig0/sig1, sha512sig0/sig1, sm3p0 | GF(2) | `01` Boolean |
| sha256sum0/sum1, sha512sum0/sum1, sm3p1 | Z/2^n | `11` arithmetic |
| anything that is not a scalar crypto instruction | none | `00` |

The tag-to-mode mapping is fixed. The *number* of masking layers per tag
(MASK_SHARES, 0–3) is held in `mask_config`. It can be rewritten at run time
through `cfg_we_i`/`cfg_tag_i`/`cfg_shares_i`. A write takes effect for
instructions that are decoded from the next cycle on. The reset policy is
1 layer for GF(2), 2 for GF(2^n) and 1 for Z/2^n. MASK_SHARES = 0 disables
masking for that tag while keeping its MASK_MODE.

Nothing in an instruction's encoding changes. The policy is per field tag,
not per instruction, so legacy binaries run unmodified.

## The masking engine

`masking_control_unit` applies MASK_SHARES layers, one after another, to each
source operand. Layer *k* of operand *o* uses its own (A, B) pair of 64-bit
random words:

* Boolean: x ← x ⊕ B
* arithmetic: x ← x + B (mod 2^64)
* affine: per byte, x_j ← A_j · x_j ⊕ B_j in GF(2^8) with the AES
  polynomial x^8 + x^4 + x^3 + x + 1. A zero byte of A is replaced by 1, so
  that the map stays invertible.

MASK_SHARES therefore counts nested masks: with two, x' = A₂·(A₁·x ⊕ B₁) ⊕ B₂,
each pair drawn fresh. The published description asks for "statistically
independent affine-masked shares per operand" without saying how they are
combined, and the nesting is this design's reading of that.

The engine outputs the masked operands together with the (A, B) pairs it
used. Layers that are not active report A = 1 per byte and B = 0. The engine
is combinational and takes no extra cycle.

The random words come from `mask_prng`: 12 independent 64-bit Galois LFSRs
(x^64 + x^63 + x^61 + x^60 + 1). Each advances 64 steps per clock, so every
output bit is fresh each cycle. 12 × 64 bits is exactly 2 operands × 3 layers
× (A, B). The LFSRs are loaded from `seed_i` while reset is held, and a zero
seed lane is replaced by a fixed constant. The seed is meant to come from an
entropy source outside this block. An LFSR is a stand-in for a
cryptographically strong generator, and swapping it is a local change.

## Getting the right answer from masked operands

This is the part of the design that needs the most care. A masked operand is
only useful if the functional unit still produces the true result, and how
that can be done depends on the function:

* **Boolean mask, GF(2)-linear function.** Every SHA-2 and SM3 operation is
  an XOR of rotations and shifts of one operand. The field table gives a
  Boolean mask to the sigma functions and P0, so these take this path. Here
  f(x ⊕ m) ⊕ f(m) = f(x).
  The CFU never unmasks. It computes f on the masked operand in the data
  lane, and f on the combined mask (the XOR of all active B words) in a
  separate mask lane. Only the final XOR of the two lanes yields the
  unmasked result. `ex_sharewise_o` reports when this path is used.
* **Affine mask on AES/SM4, arithmetic masks, or a Boolean mask on a
  non-linear function.** The S-boxes are not linear in the mask, and
  rotations do not commute with modular addition. So the CFU removes the
  layers at its input, in reverse order: x = A⁻¹·(x' ⊕ B) per byte for the
  affine mask, x' − B for the arithmetic one. It then evaluates the plain
  function.

The result leaves the CFU unmasked, as the architectural register file
requires. The second case gives no protection inside the S-box logic itself.
It protects the operand registers, the forwarding and RR-stage wiring, and
the transfer into the unit. A threshold or masked S-box implementation would
be the next step, and would replace only the unmask-then-compute branch of
`crypto_functional_unit`.

The published description says the CFU processes masked operands as if they
were unmasked, and also claims functionally correct results. Both cannot hold
for AES and SM4, and this design keeps correctness. That is the main place
where it goes beyond the published description.

## The crypto operations

All nineteen RV64 scalar crypto operations are implemented with their
ratified encodings and semantics:

* **AES** (`aes64_unit`)
  * aes64es and aes64esm: final-round and middle-round encryption of a
    128-bit state held as two 64-bit halves.
  * aes64ds and aes64dsm: the same for decryption.
  * aes64im: InvMixColumns for the equivalent inverse cipher.
  * aes64ks1i and aes64ks2: key schedule, rnum 0–10.
  * The S-box is computed, not stored: x^254 in GF(2^8), then the affine
    map. The inverse S-box is the inverse affine map, then x^254.
* **SHA-256** (`sha256_unit`) and **SHA-512** (`sha512_unit`): the four
  sigma/sum functions each. The 32-bit results are sign-extended.
* **SM3** (`sm3_unit`): P0 and P1.
* **SM4** (`sm4_unit`): sm4ed and sm4ks, byte-select form. One S-box lookup
  per instruction, followed by the linear layer L (encryption) or L′ (key
  schedule) applied to the zero-extended byte and rotated into place.
  * The S-box is computed as M · inv(M · x ⊕ 0xD3) ⊕ 0xD3 over GF(2^8)
    with polynomial 0x1F5, where M is the circulant 8×8 bit matrix whose
    first row is 0xD3.
  * This identity reproduces all 256 entries of the standard SM4 table.

## Hazards and forwarding

The only producers in this pipeline are crypto instructions. Their results
exist at the end of EX. An operand read in RR is taken, in order of
preference, from:

1. R3 (the instruction one ahead, in MEM);
2. R4 (two ahead, in WB, same cycle as the register write);
3. the external write port, if it writes the same register in this cycle;
4. the register file.

A crypto instruction whose source is the destination of the crypto
instruction currently in EX cannot be served, because that result is not
registered yet. R1 and R2 then hold for one cycle, a bubble enters RX, and
`in_ready_o` and `stall_o` show the stall. No other condition stalls. x0
reads as zero and is never written. Non-crypto instructions flow through with
MASK_MODE 00 and retire without writing. In a full core they would go to the
integer units, whose results arrive on the external write port.

## Top-level interface (`cryptrisc_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock, synchronous active-low reset |
| `in_valid_i`, `in_ready_o`, `in_instr_i` | in/out/in | 1/1/32 | instruction hand-off from fetch; transfer when both valid and ready |
| `seed_i` | in | 768 | PRNG seed, sampled while reset is low |
| `cfg_we_i`, `cfg_tag_i`, `cfg_shares_i` | in | 1/2/2 | write MASK_SHARES of one field tag |
| `ext_we_i`, `ext_waddr_i`, `ext_wdata_i` | in | 1/5/64 | register writes from the rest of the core (forwarded to RR in the same cycle) |
| `dbg_raddr_i`, `dbg_rdata_o` | in/out | 5/64 | third register read port |
| `wb_valid_o`, `wb_crypto_o`, `wb_we_o`, `wb_rd_o`, `wb_data_o` | out | 1/1/1/5/64 | retirement: kind, destination and value |
| `wb_mode_o`, `wb_shares_o` | out | 2/2 | masking metadata the instruction carried |
| `stall_o` | out | 1 | hazard stall this cycle |
| `ex_sharewise_o` | out | 1 | EX computes share-wise (Boolean mask, linear function) |

The fetch side must keep an instruction that was not taken offered and
unchanged until `in_ready_o` takes it. An assertion in `cryptrisc_top`
checks this, and another checks that a stalled instruction holds still in ID.

Parameters, with their defaults:

| module | parameter | default | note |
|---|---|---|---|
| `cryptrisc_pkg` | `XLEN` | 64 | RV64 |
| `cryptrisc_pkg` | `MAX_SHARES` | 3 | largest value of the 2-bit MASK_SHARES field |
| `mask_config` | `SHARES_GF2`, `SHARES_GF2N`, `SHARES_Z2N` | 1, 2, 1 | reset policy; 2 for GF(2^n) follows the published example |
| `mask_prng` | `LANES` | 12 | 64-bit LFSR lanes |
| `cryptrisc_top` | `PRNG_LANES` | 12 | 2 operands × `MAX_SHARES` layers × (A, B) |
| `register_file` | `NREGS` | 32 | |

## Where this departs from the published design, and what is missing

* **Pipeline stages.** The published text places register read once in
  decode and once in the masking stage. Its pipeline figure shows masking in
  cycle 3 and the CFU in cycle 4 as separate cycles, and that figure is what
  is built here. Masking and the CFU are therefore separated by a register.
* **CFU and masks.** See above: results are correct for every mask mode, by
  share-wise evaluation where the function allows it, and by unmasking at the
  CFU input otherwise.
* **Size.** Carrying three (A, B) layers for two operands into EX takes 768
  register bits, and the generator state takes another 768. The published
  overhead figure for the whole addition is about a hundred flip-flops. A
  version that carries only the combined Boolean mask and has a smaller
  generator would come closer.
* **Not included.** The CVA6 base core and its caches, memories and CSRs
  (including the cycle counter used to time the benchmarks), and a true
  entropy source. The top exposes the signals where they would connect.
* **Random source.** The LFSR generator is a placeholder for a secure PRNG.
  Its lane count and polynomial are this design's choice.
* **Own choices.** The hand-off handshake, the external register port, the
  stall rule, and the reset policy values other than GF(2^n). Also the
  byte-wise affine mask over the AES field, used for SM4 as well, and the
  nesting of mask layers.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. Expected values are
computed independently in `tb/tb_ref_pkg.sv`, which tables the S-boxes by
brute-force inversion and builds the SHA constants from integer roots of
primes. Algorithm-level known-answer tests are in `tb/tb_algos.svh`:

* FIPS-197 AES-128/192/256 encryption and decryption;
* FIPS 180 "abc" for SHA-256 and SHA-512;
* GB/T 32905 "abc" for SM3;
* the GB/T 32907 example for SM4.

* `tb_cryptrisc_top` runs the whole path at its default parameters.
  * It streams random crypto and non-crypto instructions with dense register
    dependencies and reprograms the share policy between bursts.
  * It checks each result, destination, MASK_MODE/MASK_SHARES and the
    latency (five edges plus stall cycles).
  * It counts stalls, back-pressure, forwarding from MEM, WB and the external
    port, every MASK_MODE, every MASK_SHARES value, the share-wise path, x0
    destinations and non-crypto retirements. Any of these that never occurs
    is a failure.
* `tb_cryptrisc_workloads` runs the seven benchmark kernels (AES-128/192/256,
  SHA-256, SHA-512, SM3, SM4) through the top. It runs them under the reset
  policy and with three layers for every field.

To simulate, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -I. \
    rtl/cryptrisc_pkg.sv $(ls rtl/*.sv | grep -v cryptrisc_pkg) \
    tb/tb_ref_pkg.sv tb/tb_cryptrisc_top.sv --top-module tb_cryptrisc_top
./obj_dir/Vtb_cryptrisc_top
```

Replace the last testbench file and top name to run any other testbench.

## Files

| file | content |
|---|---|
| `rtl/cryptrisc_pkg.sv` | types, op codes, GF(2^8) arithmetic, S-boxes, mask apply/remove |
| `rtl/crypto_decoder.sv` | scalar crypto instruction decoder |
| `rtl/field_detection_layer.sv` | operation → field tag table |
| `rtl/mask_config.sv` | field tag → MASK_MODE, MASK_SHARES policy registers |
| `rtl/mask_prng.sv` | LFSR mask generator |
| `rtl/masking_control_unit.sv` | layered affine masking of both operands |
| `rtl/aes64_unit.sv`, `sha256_unit.sv`, `sha512_unit.sv`, `sm3_unit.sv`, `sm4_unit.sv` | the crypto operations |
| `rtl/crypto_functional_unit.sv` | share-wise or unmask-and-compute execution |
| `rtl/register_file.sv` | 32 × 64 register file, three read and two write ports |
| `rtl/cryptrisc_top.sv` | the six-stage path with forwarding and stall |
| `tb/tb_<module>.sv` | testbench for each module |
| `tb/tb_ref_pkg.sv`, `tb/tb_algos.svh` | reference models and algorithm known-answer tests |
| `tb/tb_cryptrisc_workloads.sv` | benchmark kernels end to end |
