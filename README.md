# IMCRYPTO in SystemVerilog: an in-memory AES-128 fabric

AES spends most of its time on two byte-level steps: the S-box substitution
(SubBytes) and the column mixing over GF(2^8) (MixColumns), plus their inverses
for decryption. The fabric described here does both steps at once with table
look-ups held in small SRAM arrays. It keeps the data in a 1 MB memory that can
compute a bitwise XOR between two stored words, which is the AddRoundKey step.
A RISC-V core drives everything through a few custom instructions. The core
computes the round keys in software and calls the fabric step by step. The
same tables serve encryption and decryption, so switching direction costs
nothing.

The key trick is for decryption. Encryption needs the tables `S(x)`, `2·S(x)`
and `3·S(x)`. Decryption needs the inverse S-box, but no second table is
stored. Instead, the arrays that hold `S(x)` can also work as a
content-addressable memory (CAM). Searching all 256 rows for a byte `a` returns
the row `x` with `S(x) = a`, and that row number is `S⁻¹(a)`. An encoder behind
the CAM turns the matching row into that byte. It XORs in the round-key byte
and multiplies the result by 9, 11, 13 and 14, which are the four
InvMixColumns coefficients.

## Block structure

```
              instr / DONE        register file (4 reads, 4-word write)
 RISC-V core ───────────────┐   ┌──────────────
                            ▼   ▼
                     ┌──────────────────┐
                     │ imc_ctrl         │ decode, sequence, DONE
                     └──┬──────┬──────┬─┘
          CEM commands  │      │      │  EN + 128-bit word
                ┌───────▼──┐ ┌─▼──────────────┐ ┌────────────────────────┐
  cache side ──►│ cem      │ │ bidir_shifter  │ │ lut_fabric             │
  (ext_* port)  │ 1 MB,    │ │ (Inv)ShiftRows │ │ 4 × lut_fabric_module  │
                │ 128-bit  │ └────────────────┘ │   4 racam_array        │
                │ words    │                    │   8 ram_array          │
                └──────────┘                    │   2 xor_tree           │
                                                └────────────────────────┘
```

| Block | File | Role |
|---|---|---|
| compute-enabled memory | `rtl/cem.sv` | 65,536 × 128-bit words. Read, write, MOVE, AND, OR, XOR, NOT, ADD, rotate and shift between stored words |
| bi-directional shifter | `rtl/bidir_shifter.sv` | ShiftRows (left) or InvShiftRows (right) of a state word |
| LUT fabric | `rtl/lut_fabric.sv` | four column modules and the sequencer that loads their tables |
| LUT fabric module | `rtl/lut_fabric_module.sv` | one state column: SubBytes+MixColumns, or InvSubBytes+AddRoundKey+InvMixColumns |
| RA/CAM array | `rtl/racam_array.sv` | 256×8 array that can be read as a RAM or searched as a CAM |
| customized encoder | `rtl/racam_encoder.sv` | turns a matching row into a byte, adds the key byte, multiplies by 9, 11, 13 and 14 |
| RAM array | `rtl/ram_array.sv` | 256×8 table of `2·S(x)` or `3·S(x)` |
| XOR tree | `rtl/xor_tree.sv` | four 4-input GF(2^8) additions |
| controller | `rtl/imc_ctrl.sv` | decodes the custom RISC-V instructions and drives the blocks |
| top | `rtl/imcrypto_top.sv` | wires the four blocks together |
| shared package | `rtl/imc_pkg.sv` | types, opcodes, GF(2^8) arithmetic and the computed S-box |

The RISC-V core, its caches and main memory are not part of this RTL. The top
brings out their connections as ports:
- the instruction hand-over
- the register-file ports
- a word port into the CEM for the cache side

## Data layout

A 128-bit AES block is one CEM word.
- Byte 0 is bits [127:120], in FIPS-197 input order.
- State byte `a(r,c)` (row r, column c) is byte `4c+r`, so column `c` is bytes
  `4c..4c+3`.
- When a word passes through registers it fills four consecutive 32-bit
  registers `x[n..n+3]`, and `x[n]` holds bits [127:96].

## The LUT fabric module: how one column is computed

Each module owns one state column `a0..a3` and holds:
- **4 RA/CAM arrays.** Array k stores `S(x)` at row x.
- **8 RAM arrays.** RAM 2k stores `2·S(x)` and RAM 2k+1 stores `3·S(x)`.
- **2 XOR trees.** One is for encryption, one for decryption.

Byte `a_k` goes only to the three arrays of row k.

**Encryption (`LUT_SUBMX_E`).** Each array is read in RAM mode at address
`a_k`. The encryption tree then forms the MixColumns product of the column:

```
b_i = 2·S(a_i) ⊕ 3·S(a_{i+1}) ⊕ S(a_{i+2}) ⊕ S(a_{i+3})     (indices mod 4)
```

That is the matrix rows (2 3 1 1), (1 2 3 1), (1 1 2 3) and (3 1 1 2) applied
to `S(a)`. All 12 arrays read in the same cycle.

**Decryption (`LUT_SUBMX_D`).** The RAM arrays stay idle. The four RA/CAM
arrays run a CAM search for `a_k`, and the customized encoder of array k works
in three stages:
1. It encodes the one-hot match lines into the row number `x = S⁻¹(a_k)`
   (InvSubBytes).
2. It XORs in the round-key byte `rk_k` (AddRoundKey).
3. It forms `9·y`, `11·y`, `13·y` and `14·y` from `y = x ⊕ rk_k`, using
   combinational xtime chains.

The decryption tree then picks, for each output byte, the product that matches
the InvMixColumns matrix:

```
b_i = Σ_k Minv[i][k] · y_k,   Minv rows (14 11 13 9), (9 14 11 13), (13 9 14 11), (11 13 9 14)
```

The inverse round is usually written InvSubBytes, AddRoundKey, InvMixColumns,
because InvShiftRows commutes with InvSubBytes. The whole of it except
InvShiftRows therefore takes one pass through the fabric.

**Last rounds.**
- `LUT_SBOX_E` returns `S(a)` from the RA/CAM arrays read as RAM.
- `LUT_SBOX_D` returns `S⁻¹(a)` from a CAM search with the key input forced to
  zero.

**Timing.** An operation starts on `en` and its result is valid one clock
later. The result holds until the next operation. In the RA/CAM array, the
match lines are registered at the search edge, and the encoder and XOR tree
are combinational behind them.

**Table loading.** The arrays are volatile, so after reset `lut_fabric` writes
all 256 rows in 256 cycles and then raises `ready`:
- `S(x)` is computed in `imc_pkg::sbox` as the GF(2^8) inverse `x^254`
  followed by the AES affine map.
- `2·S(x)` is `xtime(S(x))`.
- `3·S(x)` is `2·S(x) ⊕ S(x)`.

No table file is read.

## The compute-enabled memory

The CEM is one array with two read ports and one write port. The two read
ports stand for the two word lines that a compute-enabled SRAM activates at
once. The logic behind them stands for its modified sense amplifiers. It takes
one command at a time from the controller:

| op | effect |
|---|---|
| READ / WRITE | `rdata = M[a]` / `M[d] = wdata` |
| MOVE, NOT | `M[d] = M[a]`, `M[d] = ~M[a]` |
| AND, OR, XOR | `M[d] = M[a] op M[b]` (128-bit bitwise) |
| ADD | `M[d] = M[a] + M[b]`, four independent 32-bit lanes |
| CSR, SR, CSL, SL | rotate or shift each 32-bit lane of `M[b]` by `shamt` (right or left) |

XOR of a state word and a key word is AddRoundKey. The 32-bit lanes let the
same memory run 32-bit software such as a CTR counter or SHA-256.

**Timing.**
- A command is accepted on `cmd_valid && cmd_ready`, and its sources are read
  at that edge.
- On the next edge the destination is written, `cmd_done` pulses and `rdata`
  holds the result.
- So every command takes 2 cycles, and `cmd_ready` is low in the second one.

**Cache-side port.** The `ext_*` port (request, write enable, word address,
data, acknowledge) is served only when no command is offered. It acknowledges
one cycle after acceptance.

## Custom instructions and the controller

`imc_ctrl` receives every instruction with the two custom opcodes, one at a
time. It reads up to four registers combinationally. It ends every instruction
with a one-cycle `instr_done` pulse, after which the core may issue the next
one.

I-type instructions (opcode `0000111`):

```
 31        20 19   15 14      8   7   6     0
 [ add[11:0] ][ rs1 ][ funct7 ][ b ][ opcode ]
```

| funct7 | b=0 | b=1 | action (`add` = CEM word address) |
|---|---|---|---|
| 0000000 TEXT | IMTEXT L | IMTEXT S | L: `x[rs1..rs1+3] = M[add]`; S: `M[add] = x[rs1..rs1+3]` |
| 0000100 SFTR | IMSFTR E | IMSFTR D | `M[add] = ShiftRows / InvShiftRows (M[add])` |
| 0001000 SUBMX | IMSUBMX E | IMSUBMX D | `M[add] = MixColumns(SubBytes(M[add]))`, or `InvMixColumns(InvSubBytes(M[add]) ⊕ x[rs1..rs1+3])` |
| 0010000 SBOX | IMSBOX E | IMSBOX D | `M[add] = SubBytes / InvSubBytes (M[add])` |

R-type instructions (opcode `1000111`):

```
 31     25 24  20 19  15 14    12 11  7 6     0
 [ func7 ][ s1  ][ s2  ][ funct3 ][ sd ][ opcode ]
```

| func7 | funct3 | instruction | action |
|---|---|---|---|
| 0000000 | 0..5 | IMMOVE, IMADD, IMAND, IMOR, IMXOR, IMNOT | `M[x[sd]] = M[x[s1]] op M[x[s2]]` |
| 0000000 | 6, 7 | IMCSR, IMSR | `M[x[sd]] = M[x[s2]]` rotated or shifted right by the 5-bit field s1 |
| 1000000 | 0, 1 | IMCSL, IMSL | the same, to the left |

In R-type instructions the registers hold CEM addresses, so these reach all
65,536 words. Any other function code under the two opcodes ends at once with
`instr_illegal`.

**Sequencing.** A step instruction (SFTR, SUBMX, SBOX) does this:
1. Read `M[add]`: 2 cycles.
2. Give the word to the shifter or LUT fabric with EN: 2 cycles.
3. Write the result back to the same address: 2 cycles.
4. Pulse DONE: 1 cycle.

That is 7 cycles from acceptance to `instr_done`. TEXT and R-type
instructions take 3. LUT steps also wait for `lut_ready`. If the cache side
holds the CEM, the controller waits.

**One AES-128 block.** Take the plaintext at word P and a key word at K.

Encryption:
```
IMTEXT S rk0 → K ; IMXOR P,K → P
repeat r = 1..9: IMSFTR E P ; IMSUBMX E P ; IMTEXT S rk_r → K ; IMXOR P,K → P
IMSFTR E P ; IMSBOX E P ; IMTEXT S rk10 → K ; IMXOR P,K → P
```

Decryption:
```
IMTEXT S rk10 → K ; IMXOR P,K → P
repeat r = 9..1: IMSFTR D P ; IMSUBMX D P (rk_r in x[rs1..rs1+3])
IMSFTR D P ; IMSBOX D P ; IMTEXT S rk0 → K ; IMXOR P,K → P
```

So one block takes 42 instructions to encrypt, about 210 cycles with
this controller. Decryption is shorter because the key addition is folded into
IMSUBMX D. The top-level testbench runs both programs.

## Where this RTL departs from, or fills in, the source design

The source design is published at the level of blocks, array sizes, array
contents, the decryption stages and the instruction table. These parts follow
it:
- the four blocks
- 12 arrays of 256×8 per column module, and their contents
- transposed addressing
- the three-stage encoder
- the two XOR trees
- the 1 MB CEM and its set of operations
- the opcodes and function codes
- the bit positions of the instruction fields

Everything below is this design's own choice:

- **Cycle timing.** The source gives no cycle counts. All the latencies above
  (1 cycle per array, 2 per CEM command, 3 or 7 per instruction) are choices.
- **Word and lane widths.** The CEM word is 128 bits, so one word holds one
  AES state. ADD and the shifts act on 32-bit lanes.
- **Operands.** Several points are choices:
  - `add[11:0]` is a direct word address, so step instructions reach only the
    first 4,096 words (64 KB).
  - `rs1` names four consecutive registers, which carry the data or the
    round key.
  - R-type registers hold CEM addresses.
  - The s1 field of the shift instructions is the shift amount itself.

  The published SHA-256 listing writes shifts with a constant amount, for
  example `IMCSR 17, w[i-2], t0`.
- **Round key of IMSUBMX D.** It comes from the registers. The source says
  only that the core produces round keys on the fly and provides them.
- **Table loading** at reset by a sequencer. The source does not say how the
  arrays are first filled.
- **Transistor-level circuits.** The 9T RA/CAM cell, the bit-line discharge
  write, the match-line pre-charge and the sense amplifiers are modelled at
  logic level only.
- **The CEM's tiled organisation** (mats and subarrays) is not modelled. It
  affects area and timing, not function.
- **Published inconsistencies, and how they were resolved:**
  - The figure of the RA/CAM array shows an 8-bit CAM output, but the text
    speaks of four 8-bit encoder outputs. Both are provided: `cam_out` and
    `mul[0..3]`.
  - The decryption text calls the XOR-tree result "the output of the
    InvSubBytes step". It is the InvMixColumns result, and it is implemented
    as such.
  - The published SHA-256 listing has slips:
    - `IMCR` stands for IMSR.
    - One `IMADD` in the Ch computation must be `IMAND`.
    - Some `IMMOVE` operand orders contradict the register assignment
      (`f := e`, `h := g`).
    - The loop bounds are off.

    The testbench uses the corrected program.
- **Cache side.** Main memory and the L2 cache are not modelled. The cache side
  is a plain word port into the CEM with lower priority than the controller.

## Capacity and workloads

- **AES-128 ECB over 1 MB**, the evaluated case. It needs 65,536 state words,
  which is exactly the CEM, with nothing to spare.
  - AddRoundKey needs the round key in a CEM word. At full occupancy the core
    parks one block in four of its registers (IMTEXT L), uses that word for
    the keys, and restores the block at the end (IMTEXT S).
  - Step instructions address only words 0..4,095. Each higher block is
    swapped into a low working word by three IMXORs (`a ^= b; b ^= a;
    a ^= b`), which needs no free word. It is processed there and swapped
    back.
  - A testbench runs exactly this program on a fully occupied CEM of 8,192
    words. The full 65,536 words take about eight times as long.
  - A block costs 42 instructions, plus 6 for the swaps. That is about 230
    cycles, or roughly 1.5·10^7 cycles for the whole megabyte.
- **AES-192 and AES-256.** The fabric has no round counter, so 12 or 14 rounds
  need only more IMSUBMX instructions. The key schedule runs on the core.
- **CTR and CBC.** CTR uses IMADD on a 32-bit counter lane, and CBC uses IMXOR
  with the previous ciphertext. Both are simulated for 3 blocks.
- **SHA-256.** One 512-bit block needs about 150 32-bit values, each kept in
  its own CEM word. It is simulated for the message "abc".

## Verification

Each block has a self-checking testbench in `tb/`. It compares the block
against an independent reference in `tb/tb_ref_pkg.sv`, which holds:
- an S-box generated by walking the non-zero field elements with generator 3,
  not by the inversion the RTL uses
- GF multiplication
- whole AES-128, AES-192 and AES-256 with key expansion

| Testbench | What it checks |
|---|---|
| `tb_ram_array` | random writes and reads, read latency |
| `tb_racam_encoder` | every row with random key bytes: row, XOR, the four products, no-match |
| `tb_racam_array` | RAM mode, a CAM search of every byte, one-cycle timing |
| `tb_xor_tree` | random terms |
| `tb_lut_fabric_module` | all four modes on random columns, against the reference |
| `tb_lut_fabric` | the 256-cycle load, `ready`, all modes on random states |
| `tb_bidir_shifter` | both directions, and that one undoes the other |
| `tb_cem` | every operation at full size (65,536 words), 2-cycle timing, port priority |
| `tb_imc_ctrl` | decoding and sequencing of every instruction against stand-in blocks, latencies 3 and 7, illegal codes |
| `tb_imcrypto_top` | the whole fabric at its default size, listed below |
| `tb_aes_workloads` | the full-size fabric: AES-128 ECB on 100 blocks spread over all 65,536 words (including words 4,095, 4,096 and 65,535, with window swaps); AES-192 and AES-256 on the FIPS-197 C.2 and C.3 vectors and on random keys; counts the IMSUBMX steps per block |
| `tb_ecb_full_cem` | the ECB program with every CEM word holding data, on a CEM set to 8,192 words: key word borrowed through registers, upper half swapped through the window, all ciphertexts and plaintexts compared |

`tb_imcrypto_top` runs:
- the FIPS-197 C.1 encrypt and decrypt
- random blocks loaded through the cache port
- CTR and CBC over 3 blocks
- the rotate and shift instructions
- SHA-256("abc")

It counts each mechanism and fails if one never occurs:
- every LUT mode and both shifter directions
- cache-port reads and writes
- arbitration waits
- stalls before `lut_ready`
- an illegal instruction

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
With Verilator 5, for example:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/imc_pkg.sv \
    tb/tb_ref_pkg.sv tb/tb_imcrypto_top.sv --top-module tb_imcrypto_top -o sim
./obj_dir/sim
```

Building the top-level test takes about half a minute, and running it well under a second at the full 1 MB size. Add `--assert` to check the handshake assertions in `imc_ctrl` and `lut_fabric_module`. To shrink
the memory, set the `CEM_WORDS` parameter of `imcrypto_top`, or `WORDS` of
`cem`. The address widths follow from it.
