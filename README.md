# SAILOR: a serialized RV32I core with scalar cryptography

SAILOR is a very small RISC-V processor for IoT nodes that must run
cryptography. Registers, memory ports and instruction words stay 32 bits
wide. Arithmetic, however, runs through a narrow data path: the ALU handles
`SERIAL_WIDTH` bits per cycle (1, 2, 4, 8, 16 or 32), so a 32-bit operation
takes `N = 32 / SERIAL_WIDTH` cycles. The core implements RV32I, Zicsr with
machine-mode traps and interrupts, and the scalar cryptography extensions:

- Zkn, which bundles Zbkb, Zbkc, Zbkx, Zkne, Zknd and Zknh.
- Zkt, the constant-time property.

The crypto support costs little area because it reuses the serial data path:

- An operand mask in front of the ALU implements carry-less multiply and
  crossbar permutation.
- The shift register that feeds the ALU also does rotations and byte
  selection.
- AES uses an S-box and a GF(2^8) multiplier that write into the buffer
  register the load/store unit already has.
- The SHA-2 functions are fixed shift networks whose terms the ALU XORs
  together.

Every data-dependent instruction takes a fixed number of cycles, whatever its
operands or shift amount.

This repository is a SystemVerilog implementation of that architecture. The
block structure, the serialized processing scheme and the way each extension
is mapped onto the data path follow the published description of SAILOR.
Where that description stops, this implementation makes its own choices:

- the cycle-by-cycle schedule of each instruction;
- the memory handshake;
- the CSR details;
- the gate-level contents of the S-box.

These choices are listed in the section "Where this implementation departs
from the published design".

## The serialized data path

Three units do all the arithmetic:

- **Serializer 1** (`sailor_serializer1`) is a 32-bit shift register.
  - It is loaded with operand 1. During an ALU pass it rotates right by one
    chunk per cycle, so its low chunk is always the next operand-1 chunk.
  - Because it rotates rather than shifts, operand 1 is intact after a pass.
    clmul and xperm rely on this when they make many passes over rs1.
  - It can also shift by `SHIFT_STEP` bits or by a single bit, in either
    direction. Vacated bits are filled with zeros, sign bits or (for
    rotations) the bits that fall out.
  - Shift instructions therefore run entirely in serializer 1 and never touch
    the ALU.
- **Serializer 2** (`sailor_serializer2`) holds operand 2 (rs2 or the
  immediate). Each cycle it shifts one chunk toward the LSB, and the ALU
  result chunk enters at the top. After N cycles operand 2 is gone and the
  register holds the result, ready for write-back.
- **The ALU** (`sailor_alu`) is `SERIAL_WIDTH` bits wide.
  - It does add and subtract, with a carry flip-flop between chunks. It also
    does and, or, xor, andn, orn and xnor.
  - From a subtraction it produces equal, signed-less-than and
    unsigned-less-than flags. These drive slt/sltu and the branch decisions.
  - The flags are valid one cycle after the last chunk.

In front of the ALU sits the **operand mask** (`sailor_alu_mask`). For
ordinary instructions it is transparent. For crypto instructions it decides,
bit by bit, which operand bits reach the ALU:

| Instruction | What the mask does |
|---|---|
| clmul/clmulh | Operand 1 passes only when the current multiplier bit of rs2 is 1. |
| AES final round | Only byte `bs` passes. |
| xperm | The rs1 element whose index matches passes into the result; result elements already filled are held through operand 2. |

The register file (`sailor_regfile`, 32 x 32 bits) has two asynchronous read
ports and one write port. A write-to-read bypass serves a read from the
register being written in the same cycle.

## Overlapping one instruction with the next

A one-entry fetch buffer (`sailor_fetch`) holds the next instruction. The
fetch unit assumes the next instruction is at pc + 4 (fall-through
prediction). It issues the request for that word in the cycle after the
buffer is consumed, so the fetch proceeds while the current instruction
executes.

Each instruction ends in a write-back cycle, which does two jobs at once:

1. It writes rd and updates the pc.
2. If the buffered instruction is valid and no control transfer happens, the
   write-back cycle is also the *first* cycle of that instruction. The
   decoder output of the buffered word selects the register-file read
   addresses, the serializers are loaded, and the control word is latched.

If the next instruction reads the register that is being written in that
cycle, the register-file bypass supplies the new value.

On a taken branch, a jump, a trap or mret, the buffer is flushed and a fetch
starts at the new pc. A response still in flight for the wrong path is
dropped. The core then waits in a fetch state until the new instruction
arrives.

Bit-manipulation, CSR and system instructions do not pass through the
serializers at all. jal does not either. Their result is ready in the first
cycle, so they take one cycle each.

## Instruction timing

The sequencer in `sailor_core` runs every instruction as a fixed sequence of
phases:

- `PASS`: N cycles through the ALU.
- `SHIFT`: a constant-length shift.
- `BIT`: one single-bit shift.
- `AES`: eight byte pushes.
- `AESLD` and `SHALD`: one cycle each, to load serializer 1 with the next
  operand.
- `MEM`: a memory access.
- `WB`: write-back.

A shift always takes the worst-case number of steps, which is
`SC = (32/S - 1) + (S - 1)` cycles with `S = SHIFT_STEP`. Amounts smaller than
the maximum are padded with hold cycles. The shift amount is therefore not
visible in the timing.

The table gives the cycles from the first cycle of an instruction to its
write-back cycle. This is also the issue-to-issue time when the next
instruction is already buffered.

| Instruction | Sequence | Cycles | W=1 | W=4 | W=8 | W=32 |
|---|---|---|---|---|---|---|
| add, sub, logic, slt, lui, auipc, branches, jalr | PASS, WB | N+1 | 33 | 9 | 5 | 2 |
| shifts and rotations (sll…sra, ror, rol, rori) | SHIFT, WB | SC+1 | 32 | 11 | 11 | 11 |
| clmul / clmulh | 32 × (PASS, BIT) | 32(N+1)+1 | 1057 | 289 | 161 | 65 |
| xperm4 | 8 PASS with 7 SHIFT of 4 bits | 8N+7SC+1 | 474 | 135 | 103 | 79 |
| xperm8 | 4 PASS with 3 SHIFT of 8 bits | 4N+3SC+1 | 222 | 63 | 47 | 35 |
| aes32{e,d}s{,m}i | SHIFT, 8×AES, AESLD, SHIFT, PASS, WB | 2SC+N+10 | 104 | 38 | 34 | 31 |
| sha256*, sha512* | 6 × (SHALD, PASS) | 6N+6 | 198 | 54 | 30 | 12 |
| jal, zip/unzip/brev8/rev8/pack/packh, csr*, ecall, mret | WB | 1 | 1 | 1 | 1 | 1 |
| loads and stores | PASS (address), MEM, WB | N+1+memory | | | | |

S is `SHIFT_STEP`: the default equals `SERIAL_WIDTH`, except that for 32 bits
it is 8. The testbenches check every one of these numbers at every width.

## How the crypto instructions use the data path

**clmul / clmulh.** The product is built in serializer 2, starting from zero.
There are 32 iterations. Each one makes one ALU pass that XORs the masked
multiplicand (rs1 in serializer 1) into the partial product, followed by a
single-bit shift of serializer 1:

- clmul walks rs2 from bit 0 up and shifts the multiplicand left.
- clmulh walks rs2 from bit 31 down and shifts the multiplicand right before
  each pass, so that only the high half of the product is accumulated.

The mask turns the pass into a no-op when the multiplier bit is 0. The
iteration count is always 32.

**xperm4 / xperm8.** The instruction makes E passes, with E = 8 nibbles or
4 bytes. Between passes, serializer 1 rotates rs1 right by one element. In
pass k, element j of the result takes element (j+k) mod E of rs1 when index j
of rs2 equals (j+k) mod E. The ALU ORs that element into the held result.
Indices outside the word give 0.

**AES (aes32esi, aes32esmi, aes32dsi, aes32dsmi).**

1. Serializer 1 is loaded with rs2 and rotated so that byte `bs` sits at
   bit 0.
2. The S-box (`sailor_aes_sbox`, forward or inverse) and the multiplier
   `sailor_xt2` push eight bytes into the load/store unit's buffer register:
   - first four copies of the S-box output;
   - then, for the middle-round forms, the MixColumns products 2·s, s, s,
     3·s (encryption) or the InvMixColumns products E·s, 9·s, D·s, B·s
     (decryption) of the byte that is now at the bottom of the buffer;
   - for the final-round forms, the S-box byte again.
3. The buffer is loaded back into serializer 1 and rotated left by 8·bs.
4. A final ALU pass XORs it into rs1, which waits in serializer 2. For the
   final round, the mask lets only byte bs through.

Every AES instruction makes the same eight pushes, so timing does not depend
on the round type or the data.

**SHA-2 (Zknh).** Each sha256 and RV32 sha512 instruction is an XOR of up to
six fixed shifts and rotations of rs1 and rs2. `sailor_sha2_shifts` delivers
term k of the selected function in one cycle. The core loads it into
serializer 1 (SHALD) and XORs it into serializer 2 with one ALU pass. Every
function is padded to six terms with zero terms, so all SHA instructions
take the same time.

**Zbkb.** zip, unzip, brev8, rev8, pack and packh are fixed wirings
(`sailor_bitmanip`) from the serializer contents to the write-back path.
ror, rol and rori use the rotate fill of serializer 1, and andn, orn and
xnor are ALU operations.

## Traps, interrupts and CSRs

`sailor_csr` implements the machine-mode CSRs:

- mstatus, with MIE and MPIE; MPP reads as machine mode;
- misa, reporting RV32I;
- mie and mip, for the external, timer and software interrupts;
- mtvec, in direct and vectored modes;
- mscratch, mepc, mcause and mtval;
- mcountinhibit, mcycle/mcycleh and minstret/minstreth;
- the read-only identification registers (mvendorid … mconfigptr), which
  read zero.

Traps are decided in the write-back cycle. The synchronous exceptions are:

- illegal instruction, including a CSR access to an unknown address or a
  write to a read-only CSR;
- ecall and ebreak;
- misaligned load or store address;
- misaligned jump or branch target.

Interrupts are level-sensitive. Priority is external, then software, then
timer. An interrupt is taken at the write-back of the current instruction,
which completes normally; mepc is then the address of the next instruction.
The trap redirects fetch to mtvec, or to mtvec + 4·cause for vectored
interrupts.

## Memory interface

The instruction and data ports use the same request/response protocol,
defined by the `mem_req_t` and `mem_rsp_t` structs in `sailor_pkg`:

- **Request.** The request (`valid`, `we`, `be`, `addr`, `wdata`) is held
  stable until the memory accepts it with `ready`. Addresses are word
  aligned, and stores carry byte enables.
- **Response.** Every accepted request gets exactly one `rvalid` pulse,
  carrying `rdata` for reads, one or more cycles later.
- **Outstanding requests.** Each port has at most one request outstanding.

The protocol fits simple SRAMs and bus bridges alike. The load/store unit
(`sailor_lsu`) aligns and sign-extends loaded bytes and halfwords. Its
assertions check that the request stays stable until it is accepted.

## Parameters

`sailor_core` has the following parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `SERIAL_WIDTH` | 1 | Chunk width of the data path: 1, 2, 4, 8, 16 or 32. |
| `SHIFT_STEP` | `SERIAL_WIDTH` (8 if 32) | Large shift step of serializer 1. Any divisor of 32 works. |
| `BOOT_ADDR` | 0 | Reset pc. |
| `EN_ZBKB`, `EN_ZBKC`, `EN_ZBKX`, `EN_ZKNE`, `EN_ZKND`, `EN_ZKNH`, `EN_CSR` | 1 | Turn the corresponding extension on. A disabled extension decodes as illegal. |

## Where this implementation departs from the published design

- **The 32-bit configuration.** The published 32-bit core feeds the ALU
  straight from the register file and completes an ALU instruction in one
  cycle. Here the serializers are kept at every width. With
  `SERIAL_WIDTH = 32` an ALU instruction takes 2 cycles (load, then compute
  and write back).
- **The S-box circuit.** The published design uses the smallest known
  combined AES S-box circuit (Maximov and Ekdahl). That gate netlist is not
  reproduced here. `sailor_aes_sbox` computes the same function as a GF(2^8)
  inversion between the affine maps and leaves the circuit to synthesis.
  Area figures will therefore differ.
- **Cycle counts.** The published description gives no per-instruction
  schedules. All sequences and cycle counts in the timing table are this
  implementation's own. For one AES-128 key expansion plus one block
  encryption at `SERIAL_WIDTH = 1`, it takes 28 245 cycles with a one-cycle
  memory. Decrypting the block again, including the conversion of the round
  keys for the equivalent inverse cipher, takes 53 369 cycles. The published AES-128 encryption benchmark runs in 373 µs at
  100 MHz, about 37 000 cycles; that benchmark includes its own software
  overhead, so the two numbers are not directly comparable. One SHA-256
  compression (message schedule and 64 rounds, straight-line code) takes
  95 754 cycles under the same conditions, and the PRINCE S-box layer over
  32 words, two xperm4 lookups per word, takes 39 530 cycles. One SHA-512
  compression on 32-bit register pairs takes 294 106 cycles.
- **AES operand masks.** The published data path draws an AES mask on both
  ALU operands. Only the operand from serializer 1 is masked here. rs1 in
  serializer 2 always passes whole, which is all the aes32 instructions need.
- **Constant-time shifts.** Shift amounts are padded to the worst case, so
  plain RV32I shifts are slower than they could be. The published design
  states that shift/rotate latency does not depend on the amount; how it
  achieves that is not described.
- **Fetch and memory.** The fetch buffer predicts fall-through only. The
  memory handshake, misaligned-access traps and the CSR set beyond the
  mandatory machine-mode registers are choices made here. There is no PMP
  and there are no performance-monitor event counters.
- **Instruction and data memories.** These are outside the core and not part
  of this RTL. The testbenches use a behavioural model (`tb/sailor_mem_model.sv`)
  with random wait states.

## Files

`rtl/` holds one module or package per file:

| File | Contents |
|---|---|
| `sailor_pkg.sv` | Shared types: the control word, enums, memory structs, cause codes. |
| `sailor_core.sv` | Top level and sequencer. |
| `sailor_serializer1.sv`, `sailor_serializer2.sv`, `sailor_alu.sv`, `sailor_alu_mask.sv` | The serial data path. |
| `sailor_regfile.sv`, `sailor_decoder.sv`, `sailor_fetch.sv`, `sailor_branch_unit.sv`, `sailor_lsu.sv`, `sailor_csr.sv` | Control, fetch, memory access and CSRs. |
| `sailor_aes_sbox.sv`, `sailor_xt2.sv`, `sailor_sha2_shifts.sv`, `sailor_bitmanip.sv` | Crypto helper units. |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`), plus:

| File | Contents |
|---|---|
| `tb_sailor_core.sv` | End-to-end test at the default parameters. |
| `tb_sailor_core_w{2,4,8,16,32}.sv` | The same end-to-end test at the other widths. |
| `sailor_core_test.svh` | The shared body of the end-to-end tests. |
| `tb_sailor_core_rv32i.sv` | The RV32I baseline (all crypto extensions off) next to the full core: every crypto instruction must trap as illegal on the one and run on the other. |
| `tb_sailor_core_aes128.sv` | FIPS-197 AES-128 encryption and decryption program. |
| `tb_sailor_core_prince.sv` | PRINCE S-box and inverse S-box by xperm4, in a loop. |
| `tb_sailor_core_sha256.sv` | FIPS 180-4 SHA-256 compression of the block "abc". |
| `tb_sailor_core_sha512.sv` | FIPS 180-4 SHA-512 compression of the block "abc", on register pairs. |
| `sailor_ref_pkg.sv` | Reference models and instruction encoders. |
| `sailor_mem_model.sv` | Behavioural memory. |

Every testbench has a watchdog and prints one line of the form
`TB_RESULT checks=<n> failures=<m>`.

The end-to-end test assembles a program of about 3500 instructions. It covers:

- every implemented instruction, on edge-case and random operands;
- loads and stores of every size;
- jumps over illegal words;
- CSR accesses;
- a misaligned load, ecall, an illegal instruction, ebreak, and an external
  interrupt raised in the middle of a loop.

It checks every stored result against the reference model and checks the
trap log. It also checks the cycle count of every timed instruction. Finally,
it requires that each of these mechanisms happened at least once:

- register-file bypass;
- issue from the fetch buffer during write-back;
- refetch after a redirect;
- a dropped stale fetch;
- taken and not-taken branches;
- exception, interrupt and mret;
- a stall on the data memory.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb -Itb +libext+.sv \
  rtl/sailor_pkg.sv tb/sailor_ref_pkg.sv tb/tb_sailor_core.sv --top-module tb_sailor_core
./obj_dir/Vtb_sailor_core
```

Replace the top to run another testbench. Each unit testbench runs in well
under a second. The full end-to-end test at `SERIAL_WIDTH = 1` simulates
about 160 000 cycles in a fraction of a second.
