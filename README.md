# SAES32 / SSM4: one-S-box AES and SM4 instructions for RV32

AES and SM4 are both 128-bit block ciphers whose only non-linear part is an
8-bit S-box. Table-based software for them is slow on small cores and leaks
secret data through cache timing. This design adds a single, small
R-type instruction family to a 32-bit RISC-V core that removes the tables. One
instruction does one S-box lookup plus a slice of the surrounding linear
layer. Sixteen of them make an AES round, and sixteen plus ten XORs make four
SM4 steps.

Every instruction computes

    rd = rs1 ^ rotl32( expand_op( sbox_op( byte_b(rs2) ) ), 8*b )

where `b = fn[1:0]` picks a byte of `rs2` and `op = fn[4:2]` picks the S-box
and the expansion. The rotation puts each byte's contribution into the right
row, so ShiftRows costs nothing: software gets it by choosing which register
and which byte to feed in. The XOR with `rs1` is AddRoundKey in AES and the
state-word update in SM4. The unit reads only the main register file and holds
no state. It is purely combinational and is meant to sit in a single-cycle
execute stage.

## The function field

| fn[4:2] | mnemonic        | S-box   | 32-bit expansion of s (byte 3 ... byte 0) | used for |
|---------|-----------------|---------|---------------------------------------------|----------|
| 000     | `saes32.encsm`  | AES     | {3s, s, s, 2s} (one MixColumns column)      | AES encryption rounds |
| 001     | `saes32.encs`   | AES     | {0, 0, 0, s}                                | last encryption round, key schedule |
| 010     | `saes32.decsm`  | AES^-1  | {11s, 13s, 9s, 14s} (InvMixColumns column)  | AES decryption rounds |
| 011     | `saes32.decs`   | AES^-1  | {0, 0, 0, s}                                | last decryption round |
| 100     | `ssm4.ed`       | SM4     | L(s) = s^(s<<<2)^(s<<<10)^(s<<<18)^(s<<<24), byte-swapped | SM4 encryption and decryption |
| 101     | `ssm4.ks`       | SM4     | L'(s) = s^(s<<<13)^(s<<<23), byte-swapped   | SM4 key schedule |
| 11x     | unused          | -       | 0, and the decoder flags the word as illegal | - |

This gives 6 operations × 4 byte positions = 24 code points. Products are in
GF(2^8) modulo x^8+x^4+x^3+x+1.

**Byte order.** Words are little-endian, so byte 0 of a register is AES row 0
when the state is loaded with `lw`. The SM4 standard writes its 32-bit words
big-endian. Instead of swapping bytes in software, the SM4 expansions are
defined on the byte-swapped word. Take the S-box output as the *top* byte of a
big-endian word, apply L or L', and byte-swap the result. Worked out as bit
shifts of the byte s:

    ssm4.ed:  s ^ s<<8 ^ s<<2 ^ s<<18 ^ (s & 0x3F)<<26 ^ (s & 0xC0)<<10
    ssm4.ks:  s ^ (s & 0x07)<<29 ^ (s & 0xFE)<<7 ^ (s & 0x01)<<23 ^ (s & 0xF8)<<13

So SM4 software loads its block and keys with plain `lw`. It keeps every word
byte-swapped compared with the standard. Constants such as FK and CK must be
stored byte-swapped.

## How software uses it

**AES round.** The state is four column words, kept in two sets of four
registers that take turns. For output column j, set the destination register
to round-key word j, then apply `saes32.encsm` four times with
`rd = rs1 = dst[j]`, `rs2 = src[(j+i) mod 4]`, byte `i = 0..3`. Four columns
give 16 instructions per round. The last round uses `saes32.encs`. The
AddRoundKey XOR disappears because the round key is the starting value of the
destination. Decryption follows the equivalent inverse cipher with
`src[(j-i) mod 4]`. Its round keys are passed through InvMixColumns once,
which the instructions themselves can do: four `saes32.encs` give SubWord(k),
and four `saes32.decsm` on that give InvMixColumns(k). Key expansion uses
`saes32.encs` on the previous word, rotated right by 8 bits for RotWord.

**SM4 round (4 steps).** Step i replaces X_i by
X_i ^ L(τ(X_{i+1} ^ X_{i+2} ^ X_{i+3} ^ rk_i)). The XOR input takes 3 XORs.
Four `ssm4.ed` with `rd = rs1 = X_i` and bytes 0..3 then apply τ and L.
Sharing the partial sums X2^X3 and X4^X5 cuts a 4-step round to 10 XORs and
16 `ssm4.ed`. The key schedule is the same with `ssm4.ks` and the CK
constants. Decryption uses the round keys in reverse order.

## The S-boxes: one middle layer, three pairs of linear layers

This is the part of the design that takes the most explaining.

The AES, inverse AES and SM4 S-boxes are all a field inversion x^-1 in
GF(2^8) wrapped in affine maps:

    AES:     S(x)    = A·inv(x) ^ 0x63
    AES^-1:  S^-1(y) = inv(A^-1·(y ^ 0x63))
    SM4:     S(x)    = A1·inv'(A1·x ^ 0xD3) ^ 0xD3,  inv' in GF(2^8)/(x^8+x^7+x^6+x^5+x^4+x^2+1)

Inversions in any two representations of GF(2^8) are related by a linear
field isomorphism φ: inv'(z) = φ^-1(inv(φ(z))). So all three S-boxes can share
one non-linear circuit, and they differ only in linear layers before and after
it.

The shared circuit (`sbox_mid`) is the middle section of the Boyar–Peralta
low-depth AES S-box. It has 21 inputs, 30 XOR and 34 AND gates, and 18
outputs. It computes the inverse in a tower-field basis. Its 21 inputs are
fixed linear forms of the byte being inverted, and the inverse is a fixed
linear function of its 18 outputs. Each S-box is therefore

    8 bits --top layer--> 21 bits --sbox_mid--> 18 bits --bottom layer--> 8 bits

- **AES** (`sbox_aes_top`, `sbox_aes_bot`) uses the published Boyar–Peralta
  top layer (26 XOR) and bottom layer (34 XOR + 4 XNOR). The four XNORs insert
  the constant 0x63. The published circuit feeds 22 signals into its middle
  section. Here T25 = T20 ^ T17 is formed inside `sbox_mid` instead, which
  gives a 21-input, 30-XOR middle layer and a 26-XOR top layer. Those are the
  published gate counts for this structure.
- **AES^-1** (`sbox_aesi_top`, `sbox_aesi_bot`): the top layer computes the
  same 21 forms as the AES top layer, but of u = A^-1(y ^ 0x63). That is an
  affine function of y. The bottom layer must return inv(u) itself rather than
  A·inv(u) ^ 0x63, so it is A^-1 composed with the linear part of the AES
  bottom layer.
- **SM4** (`sbox_sm4_top`, `sbox_sm4_bot`): the top layer computes the 21
  forms of u = φ(A1·x ^ 0xD3). The bottom layer computes A1·φ^-1(inv(u)) ^ 0xD3
  from the 18 products. φ maps x^i of the SM4 field to β^i, where β = 0x23 is
  the smallest root of the SM4 polynomial in the AES field.

The AES^-1 and SM4 layers are written as constant GF(2) matrices: output bit
k = parity(input & ROW[k]) ^ CONST[k]. The rows are the compositions just
described, so each layer is exactly the stated function and costs a handful
of XORs per bit. Published versions of these layers are hand-optimised
XOR/XNOR netlists of 26 (AES^-1 top), 37 (AES^-1 bottom), 27 (SM4 top) and 38
(SM4 bottom) gates. Here that optimisation is left to the synthesis tool.
Yosys mapping to two-input XOR/XNOR/AND gates
(`synth -flatten; abc -g XOR,XNOR,AND`) gives the following sizes. Inverters
are not counted; the published size is in brackets.

| layer        | AES^-1 | SM4     |
|--------------|--------|---------|
| top layer    | 29 (26)| 34 (27) |
| bottom layer | 46 (37)| 42 (38) |

A complete S-box then comes to about 150 gates, against 136 for AES with
the published AES netlists.

To rebuild a matrix, push each basis vector e_b through the map and read off
which of the 21 forms (or 8 output bits) flip. The constant column is the
image of 0. In the top layers, ROW[k] bit b is set when input bit b affects
middle input k. The middle inputs are ordered T1, T2, T3, T4, T6, T8, T9, T10,
T13, T14, T15, T16, T17, T19, T20, T22, T23, T24, T26, T27, U7 (bit 0 first),
with Boyar–Peralta's numbering and U0 the most significant input bit.

`saes32` holds one complete S-box (top, middle, bottom) per cipher and
selects the output with fn[4:3]. The alternative is one middle layer with
multiplexed outer layers. It saves a middle layer, but the multiplexers are
large and lengthen the critical path, so it is not used.

## Configurations

`saes32`, `saes32_decode` and `saes32_cx` take three `bit` parameters,
`EN_AES`, `EN_AESI` and `EN_SM4`, all 1 by default. Clearing them drops S-box
circuits:

| configuration      | EN_AES | EN_AESI | EN_SM4 | S-boxes built |
|--------------------|--------|---------|--------|---------------|
| AES + SM4 (default)| 1      | 1       | 1      | 3 |
| AES full           | 1      | 1       | 0      | 2 |
| SM4 only           | 0      | 0       | 1      | 1 |
| AES encrypt only   | 1      | 0       | 0      | 1 (enough for CTR/GCM) |

A rough size check: mapping `saes32` to two-input CMOS gates with Yosys
(`synth -flatten; abc -g cmos2; stat -tech cmos`) gives about 4,100
transistors for AES encrypt only, 4,900 for SM4 only, 7,600 for AES full and
10,200 for AES + SM4. Published estimates for the same four subsets, made with
a different mock-up cell library, are 2,568, 3,066, 4,960 and 6,714
transistors. The absolute numbers depend on the library, but the ratios
between configurations agree to within about 10%.

A left-out S-box reads as 0, so its code points return `rs1` unchanged. The
decoder raises `illegal` for them so that the host core can trap. That
behaviour, and trapping on the unused points 11x, are this design's choices.

## Instruction encoding and the execution unit

For prototyping, the instructions use the custom-0 major opcode:

    [31:30]=00 | [29:25]=fn | [24:20]=rs2 | [19:15]=rs1 | [14:12]=000 | [11:7]=rd | [6:0]=0001011

`saes32_cx` is the top level. It joins the decoder and the instruction logic
into an execute-stage unit that is purely combinational:

| port | dir | meaning |
|------|-----|---------|
| `instr[31:0]` | in | instruction word in execute |
| `rs1_idx[4:0]`, `rs2_idx[4:0]` | out | register indices to read |
| `rs1_val[31:0]`, `rs2_val[31:0]` | in | their values from the core's register file |
| `rd_we` | out | supported SAES32/SSM4 instruction: write `rd_val` |
| `rd_idx[4:0]`, `rd_val[31:0]` | out | destination and result |
| `illegal` | out | custom-0 SAES32-shaped word with an unused or left-out fn |

The result appears in the same cycle as the instruction. The host core is not
part of this RTL. It supplies register reads and write-back, and it decides
what to do with `illegal`. For RV64, the core zero-extends or truncates the
32-bit words outside the unit.

## Files

| file | contents |
|------|----------|
| `rtl/saes32_pkg.sv` | op and S-box enums, encoding constants, decoded-field struct, `gf_xtime`, `rotl8` |
| `rtl/sbox_mid.sv` | shared non-linear middle layer (21→18) |
| `rtl/sbox_{aes,aesi,sm4}_top.sv` | top linear layers (8→21) |
| `rtl/sbox_{aes,aesi,sm4}_bot.sv` | bottom linear layers (18→8) |
| `rtl/sbox_{aes,aesi,sm4}.sv` | complete S-boxes |
| `rtl/saes32_expand.sv` | 8→32 linear expansion |
| `rtl/saes32.sv` | instruction logic, with the port list `rd, rs1, rs2, fn` |
| `rtl/saes32_decode.sv` | custom-0 decoder |
| `rtl/saes32_cx.sv` | top: execution unit |
| `tb/tb_ref_pkg.sv` | reference models (see below) |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

The reference models in `tb/tb_ref_pkg.sv` come straight from the cipher
definitions and share nothing with the gate-level RTL. They compute S-boxes by
inversion as x^254 followed by the affine maps, MixColumns by GF
multiplication, and L and L' as rotations of a big-endian word followed by a
byte swap. Each testbench prints `TB_RESULT checks=N failures=M` and has a
watchdog.

- `tb_sbox_aes`, `tb_sbox_aesi`, `tb_sbox_sm4`: all 256 inputs checked
  against the model and against the first table row published in FIPS-197 and
  the SM4 standard. The SM4 test also checks the last row.
- `tb_sbox_mid`: the shared middle layer, through all three S-boxes.
- `tb_saes32_expand`: all 8 code points × 256 bytes.
- `tb_saes32`: all 32 fn values with swept and random operands, on one
  instance of each configuration in the table above.
- `tb_saes32_decode`: fields and flags for every fn, plus near-miss words
  (wrong opcode, funct3 or funct7[6:5]).
- `tb_saes32_cx`: end to end, at the default parameters. The testbench plays
  the core (register file, memory, and `lw`/`xor`/rotate) and runs complete
  programs through the unit:
  - AES-128, AES-192 and AES-256 key expansion, encryption and decryption,
    checked against FIPS-197 Appendix C;
  - SM4 key schedule, encryption and decryption, checked against the example
    in the SM4 standard, including round keys rk0 and rk31.

  It also checks that each AES round takes 16 SAES32 instructions and each SM4
  round 16 `ssm4.ed`/`ssm4.ks` plus 10 XORs. It checks that unused code points
  trap and that other opcodes are ignored, and every instruction's result is
  compared with the model.

To run a testbench with Verilator 5 from the directory holding `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/saes32_pkg.sv tb/tb_ref_pkg.sv tb/tb_saes32_cx.sv \
        --top-module tb_saes32_cx -o sim && ./obj_dir/sim

Each testbench finishes in well under a second.

## Where this RTL departs from or goes beyond the published description

The architecture is M.-J. O. Saarinen's proposal "A Lightweight ISA Extension
for AES and SM4" (SECRISC-V 2020). The instructions were later taken into the
RISC-V cryptography extension proposal. The points below separate what that proposal fixes from what this
RTL chose.

- The inverse-AES and SM4 outer layers are exact, but they are written as
  matrices rather than the published hand-optimised gate lists. Gate counts
  after synthesis will differ from the 26/37/27/38 gates quoted for them.
- The AES top, middle and bottom gate lists are the published Boyar–Peralta
  ones. Moving T25 into the middle layer is this design's reading of the
  21-input middle layer.
- The exact MixColumns coefficients, SM4 L/L' shifts and byte-lane
  conventions follow the AES and SM4 standards and the little-endian rule
  above. The architecture description fixes only their roles.
- Behaviour for unused or left-out code points (result `rs1`, `illegal`
  raised) is this design's choice.
- The host-core interface (`saes32_cx` ports) is a plain single-cycle
  execute-stage interface chosen here. The FPGA prototype's pipeline interface
  is not documented.
- Not built: the optional `ssm4.ed4` variant with four parallel S-boxes, and a
  single middle layer with multiplexed outer layers. Both are discussed only
  as alternatives.
