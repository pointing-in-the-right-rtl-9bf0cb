# Residue-encoded pointers with address-linked memory accesses

A fault attack on a processor does not have to touch the data to do damage: it
is enough to bend the *address* of a load or store. A flipped bit in a pointer
register, a glitch during pointer arithmetic or a disturbance on the address bus
makes a perfectly intact value come from, or go to, the wrong place. Data
codes (AN codes, parity, ECC) cannot see this, because the value that arrives
is itself a valid code word.

This RTL implements a hardware countermeasure with two parts, following the
ACSAC 2018 work "Pointing in the Right Direction – Securing Memory Accesses in a
Faulty World":

1. **Every data pointer carries its own redundancy.** A 64-bit pointer holds a
   40-bit address, an MMIO tag bit and 23 bits of residues of the address modulo
   5, 7, 17, 31 and 127. Residue codes are arithmetic codes, so pointer
   additions and subtractions are carried out on the address and on the
   residues side by side, and every result is checked.
2. **Every byte in memory is tied to its address.** A protected store xors each
   data byte with a one-byte digest of its own encoded byte address; a protected
   load removes the same digest. A load that reaches the wrong address removes
   the wrong digest and returns corrupted data, which the program's data
   protection then catches. Address faults become data faults.

The RTL is the execution side of this scheme as it sits in the decode,
execute and write-back stages of an RV64 pipeline: an immediate encoder in decode, a
residue ALU in execute, and a load/store unit with the linking logic. The base
core around it (instruction fetch, decoder, register file, integer ALU,
multiplier, CSRs) is not included; the extension receives already decoded
operations and register values and hands results back.

## 1. Encoded pointer format

| bits  | 63:57 | 56:52 | 51:47 | 46:44 | 43:41 | 40   | 39:0 |
|-------|-------|-------|-------|-------|-------|------|------|
| field | r4    | r3    | r2    | r1    | r0    | MMIO | p (byte address) |
| meaning | mod 127 | mod 31 | mod 17 | mod 7 | mod 5 | tag | 40-bit pointer |

* The **functional value** is the 41-bit `{MMIO, p}`; all residues are taken of
  this value, so the MMIO tag is protected as well.
* `r_k = {MMIO,p} mod m_k` with `m = {5, 7, 17, 31, 127}`. The set forms a code
  of Hamming distance 5: up to four flipped bits anywhere in the 64-bit word
  give an invalid pointer.
* **MMIO = 1** marks a pointer to a peripheral. Such accesses still use the
  checked pointer arithmetic, but the data is not linked, because a peripheral
  register must see the plain value.
* 40 address bits give a 1 TiB address space.

The field widths 3, 3, 5, 5, 7 are those needed by the moduli (31 needs five
bits). The published bit-field drawing of this format places the r3/r4
boundary one bit lower (r3 four bits, r4 eight bits), which cannot hold a
residue modulo 31; this design follows the widths, not that boundary. All
positions are defined once, in `rptr_pkg` (`RES_OFF`, `RES_WID`), so a
different packing is a one-line change there (and in the reference model of
the testbenches).

## 2. Residue arithmetic and its check (`res_alu`, `res_encoder`, `imm_res_encoder`)

### Encoding
`res_encoder` turns a value into its five residues. Each input bit `i`
contributes the constant `2^i mod m`; per modulus the constants of the set bits
are summed (at most 41·126, 13 bits) and the small sum is reduced once. The
constants are computed at elaboration time by `rptr_pkg::pow2_mod`. This is the
straightforward structure; faster residue generators exist and could replace
it without changing the interface.

### Operations

| operation | result |
|-----------|--------|
| `renc rd, rs1`        | `{enc(rs1[40:0]), rs1[40:0]}` – upper bits of rs1 are ignored, so encoding an encoded pointer changes nothing |
| `rdec rd, rs1`        | `{23'b0, rs1[40:0]}` – pure wiring; decoding twice changes nothing |
| `radd rd, rs1, rs2`   | `{(r1+r2) mod m, f1+f2}` |
| `raddi rd, rs1, imm`  | as radd with rs2 = encoded immediate |
| `rsub rd, rs1, rs2`   | `{(r1−r2) mod m, f1−f2}` |

The ALU has a single 41-bit adder for the functional part and one adder plus
modular reduction per residue; subtraction reuses them with the two's
complement of `f2` and the modular negation `m − r2` of each residue. A mux
(`isRenc`) feeds the shared encoder either `rs1` (for `renc`) or the adder sum.

### The check
After every `radd`/`raddi`/`rsub`, and for every address of a protected load or
store, the encoder re-encodes the functional sum and compares it with the
residues computed by the residue adders. `res_error_o` has one bit per modulus.
A fault in an operand, in the functional adder or in the residue path makes the
two disagree. The bits are redundant on purpose: several of them fire for most
faults, so a single stuck error line does not hide an attack.

### Immediates
The 12-bit immediate of `raddi` and of the memory instructions is encoded in the
decode stage (`imm_res_encoder`): its functional part is the sign extension to
41 bits, its residues are those of the *signed* value, `m − (|imm| mod m)` for
a negative immediate. Then `p + imm` stays consistent as long as the result does
not wrap below address 0.

### Limits of the arithmetic
The functional adder wraps modulo 2^41, residue arithmetic does not. A `radd`
whose sum overflows 2^41, or an `rsub`/negative offset that goes below zero,
therefore raises `res_error_o` although no fault happened. Valid pointer
arithmetic inside the address space never does this.

## 3. Linking data with addresses (`ptr_reduce`, `protected_lsu`)

For a data byte stored at byte address `a` (MMIO = 0):

```
P(a)   = {res({0,a}), 0, a}                 64-bit encoded byte address
pad(a) = P[7:0] ^ P[15:8] ^ ... ^ P[63:56]  xor of its eight bytes
mem[a] = data ^ pad(a)                      store
data   = mem[a] ^ pad(a)                    load
```

Every byte is linked with its own address, not with the address of the whole
word. Neighbouring bytes therefore get different pads, and accesses of any size
and alignment see exactly the same memory image: a doubleword stored with `rsdck`
can be read back byte by byte with `rlbck`. Because the pad is taken of the
*encoded* address, two addresses that differ in a single bit differ in their
residues too, which spreads the difference over the pad byte.

`ptr_reduce` computes the eight pads of one 64-bit word in parallel (eight
residue encoders and xor trees, about 3000 cells after coarse synthesis) and
xors them onto the data. xor is its own inverse, so one instance serves stores
and loads. It passes data through unchanged when the pointer's MMIO bit is set
or when linking is off (the unmodified RISC-V loads and stores).

What the linking detects: a load that is redirected (pointer fault that escaped
the check, or address-bus fault) delivers `data ^ pad(a) ^ pad(a')`, a
corrupted value. The pad is a single byte, so one byte read from a random
wrong address keeps its value with probability 1/256; every further byte of
the access makes that less likely. A redirected store is detected later, when the correct
location or the wrong one is read back. The linking itself does not raise a
flag; detection is left to whatever code protects the data values in software.

### Load/store unit
`protected_lsu` runs one access at a time on an RI5CY-style data bus
(`req`/`gnt`/`rvalid`, word-aligned `addr`, byte enables `be`). It

* shifts store data into byte lanes, sets the byte enables and links the bytes;
* unlinks read data, shifts it down and sign- or zero-extends it for b, h, w and
  d accesses (the `u` variants zero-extend);
* accepts any alignment: an access that crosses a 64-bit boundary is split into
  two word transfers, lower word first, each linked with its own word's byte
  addresses. The loaded halves are gathered in a 128-bit lane image before
  extraction.

Timing with a memory that grants at once and answers in the next cycle: the
response comes 2 cycles after the request is accepted, or 4 cycles for a split
access. Assertions check that a request is held, with a stable address, until it
is granted.

## 4. Pipeline integration (`rptr_unit`)

```
 decode                    | ID/EX |   execute                          | write-back
 id_imm -> imm_res_encoder |       |   res_alu (add/sub/enc/dec, check) |
 opb = imm_enc or rs2 -----|------>|   -> result  ------------------->  EX/WB reg -+
 rs1, rs2, op, rd ---------|------>|   -> checked address -> protected_lsu -------+--> wb_*
                           |       |      res_error -> suppress access, alarm     |
```

`rptr_unit` is the top level. Its interface:

| port | dir | meaning |
|------|-----|---------|
| `id_valid_i`, `id_ready_o` | in/out | hand-over of one decoded operation |
| `id_op_i` (`rptr_op_e`) | in | `OP_RENC, OP_RDEC, OP_RADD, OP_RADDI, OP_RSUB, OP_RLOAD, OP_RSTORE, OP_LOAD, OP_STORE` |
| `id_rd_i`, `id_rs1_i`, `id_rs2_i`, `id_imm_i` | in | destination, operands (rs2 = store data), 12-bit immediate |
| `id_size_i`, `id_unsigned_i` | in | access size b/h/w/d, zero extension |
| `wb_valid_o`, `wb_we_o`, `wb_rd_o`, `wb_data_o` | out | in-order write-back; `wb_we_o` is 0 for stores |
| `wb_err_o` | out | the instruction was stopped by a residue error |
| `res_error_o[4:0]` | out | residue check of the instruction in execute |
| `alarm_o` | out | sticky: a residue error has occurred |
| `split_o` | out | the retiring access used two bus transfers |
| `data_*` | | data bus, see above |

Timing: a residue operation accepted at clock edge *n* is written back in the
cycle after edge *n+1*; back-to-back residue operations retire one per cycle.
Execute holds while the LSU is busy, so memory operations and ALU results
retire in program order and at most one bus access is outstanding.

On a residue error in execute, the unit does not issue the memory access, does
not write the destination register, retires the instruction with `wb_err_o` and
sets `alarm_o`. The base core is expected to enter its safe state from there
(trap, reset or halt – that choice is the integrator's).

Plain RISC-V loads and stores (`OP_LOAD`, `OP_STORE`) use `rs1 + imm` as a
64-bit address, without check and without linking; they stay available for
code that does not use encoded pointers.

### Not included
The RV64IM base core – prefetch buffer, instruction decoder, register file,
integer ALU, multiplier/divider, CSRs, hazard detection and forwarding – is not
part of this RTL. No instruction encodings are defined for the new
instructions; `id_op_i` is the decoder's output. The compiler and linker
support that produces encoded pointers and linked initial data is outside the
hardware.

## 5. Design choices where the scheme leaves freedom

* Residue field packing: widths 3, 3, 5, 5, 7 in modulus order from bit 41 up
  (see section 1).
* Encoder structure: weighted bit sums, not a specialised residue generator.
* Residues of negative immediates: mathematical (non-negative) residues.
* Error gating: `res_error_o` is only meaningful, and only driven, for add and
  subtract (including address generation).
* `rdec` keeps the MMIO bit (bit 40) and clears bits 63:41.
* Byte lane of a byte = its address bits 2:0; one `ptr_reduce` inside the LSU
  links stores and unlinks loads.
* Misaligned accesses crossing a word are split into two transfers.
* Bus protocol, one outstanding access, and the behaviour after a residue error
  as described in section 4.

## 6. Verification

Each module has a self-checking testbench in `tb/` that compares against a
reference written from the definitions (`tb/rptr_ref_pkg.sv`: plain `%`
arithmetic on integers, independent of the RTL structure):

| testbench | what it checks |
|-----------|----------------|
| `tb_res_encoder` | corner values, every single-bit input, 2000 random values |
| `tb_imm_res_encoder` | all 4096 immediates |
| `tb_res_alu` | renc/rdec (incl. idempotence), radd, rsub, negative immediates; every single-bit fault in either operand and 3000 random 2–4-bit faults are flagged; no false alarms |
| `tb_ptr_reduce` | pads of each lane, link/unlink round trip, wrong address corrupts data, MMIO and disable bypass |
| `tb_protected_lsu` | 1500 random accesses of all sizes, offsets, linked/plain/MMIO, with random bus stalls; memory image of linked data; split accesses; latency of single and split accesses; an address-bus fault corrupts a linked load but not a plain one |
| `tb_rptr_unit` | end-to-end: 400 back-to-back residue operations (latency and throughput), 600 random memory operations through encoded base + immediate, MMIO and plain accesses under bus stalls, a tampered pointer (error, alarm, no bus access), an address-bus fault, 100 word-crossing accesses; counts each mechanism and fails if one never happened |

`tb_kernel_fir` runs the pointer and memory side of an FIR filter (64 samples,
8 taps) through the extension as protected code would: base pointers made with
`renc`, linked initial data written with `rshck`, the loop walking the arrays
with `raddi` and reading with `rlhck`, results stored with `rswck` and read
back after rewinding the pointer with negative immediates. The testbench itself
performs the multiply-accumulate, standing in for the base core.

`tb_kernel_conv2d` does the same for a 3x3 convolution over a 12x12 byte
image: unsigned and signed byte loads with the window offsets as immediates,
the end of each row found by `rsub` of two encoded pointers, 16-bit results
stored to an odd address (so some of them cross a 64-bit word and are split),
and a completion flag written through a pointer with the MMIO bit set, which
must land in memory unlinked. Memory stalls are random.

`tb_kernel_keccak` keeps the 25 lanes of a Keccak-f[1600] state in linked
memory and runs all 24 rounds with `rldck`/`rsdck`, the round function being
computed by the testbench. The result for the all-zero state is checked
against the published first lane `F1258F7940E1DDE7`, which also makes the
testbench's own round function trustworthy. A copy of the state is written
through a pointer formed with `radd` and walked with negative `raddi` steps.

`tb_kernel_aes_cbc` encrypts two AES-128 blocks in CBC mode with the S-box
and the state in linked memory. Each S-box lookup is a data-dependent pointer:
the state byte is loaded, encoded with `renc`, added to the encoded S-box base
with `radd`, and the entry is loaded through the result. The first block is
checked against the FIPS-197 example ciphertext
`69c4e0d86a7b0430d8cdb78070b4c55a`. The S-box is computed from its definition
(inverse in GF(2^8), then the affine map) rather than stored as a table.

`tb_kernel_fft` runs an in-place 16-point radix-2 FFT on 16-bit complex
samples stored at an odd address, so many halfword accesses are split. Each
element pointer is built as `radd(base, renc(offset))` and its butterfly
partner with `raddi`. A constant input must end up in bin 0 (within twiddle
rounding), and a random input must match the same arithmetic done without
memory.

These kernel testbenches exercise the pointer and memory traffic of each
workload. They do not measure the workloads' run time on a processor: every
operation waits for the previous one to retire, and the base core's
instructions are missing.

`tb/tb_data_mem.sv` is a behavioural memory with random grant stalls and an
address-fault input. The design has no size parameters, so `tb_rptr_unit` runs
the full design. Every testbench prints `TB_RESULT checks=N failures=M`.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rptr_pkg.sv tb/rptr_ref_pkg.sv tb/tb_rptr_unit.sv --top-module tb_rptr_unit
./obj_dir/Vtb_rptr_unit
```

Replace `tb_rptr_unit` by any other testbench name. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/rptr_pkg.sv rtl/<module>.sv`.
The remaining lint warnings are unused upper bits of intermediate sums and the
reset used both in the flops and in `disable iff` of the assertions.

Size after coarse synthesis (word-level cells, not gates): `rptr_unit` about
3750 cells and 500 flip-flop bits, of which `ptr_reduce` with its eight
encoders is about 3100 cells and `res_alu` about 440.

### How far to trust it
The arithmetic, the encoding and the linking are checked exhaustively or
against an independent model on thousands of random cases. Not verified: the
behaviour inside a real RV64 core (hazards, exceptions, forwarding), timing
closure, and the benchmark programs used to evaluate the scheme, which need the
complete core and the modified compiler.
