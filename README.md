# A five-stage MIPS processor with instruction and data encryption

This is a 32-bit MIPS-style pipeline in which program code and data can be kept
enciphered in memory. A block cipher sits in two places. At instruction fetch it
deciphers the word at the PC before the word reaches the decoder. At memory access it
enciphers stored words and deciphers loaded ones. One block cipher is built in, chosen
by a parameter: DES (the default), triple DES (TDES) or AES-128. A mode bit chooses
whether the cipher is used at all. The program can switch that bit with the `CRYPT`
instruction, and load its own keys with the `LKLW`/`LKUW` instructions.

The design also saves power in two ways. First, after a store, branch or jump,
arithmetic instructions skip the memory stage until the next load. Second, the clocks
of the register file, the memories and the key register are gated off in cycles that
do not write them.

The RTL follows a published description of such a processor. That description gives
the stage organisation, where the ciphers sit, the instruction list, the key register,
the memory-stage bypass rule and the load mode, along with the cipher algorithms
themselves. Everything it leaves open was decided here. These decisions are marked in
the sections below and collected in "Departures and open points".

## Block map

```
            +-------------------------- mips_crypto_top ---------------------------+
 host port  |  io_unit ---> instr_mem, data_mem, register_file, key_register        |
            |                                                                       |
            |  IF:  program_counter -> instr_mem -+-> MUX -> IF/ID                  |
            |                      crypto_unit(IF) -+  (crypt mode)                 |
            |  ID:  control_unit, register_file, sign_extender, hazard_unit         |
            |  EXE: forwarding_unit, alu, branch/JR resolution                      |
            |  MEM: crypto_unit(enc) -> data_mem -> crypto_unit(dec)                |
            |  WB:  register_file / key_register write                             |
            |  clock_gate on every storage write                                    |
            +-----------------------------------------------------------------------+

 crypto_unit --> des_core  | tdes_core | aes_core  (one of them, parameter ALG)
 des_core / tdes_core --> des_f, des_key_schedule, permutation_unit
 aes_core --> aes_pkg (S-box, MixColumns)
```

| file | what it is |
|---|---|
| `mips_pkg.sv` | opcodes, functs, ALU operations, cipher selection, the `ctrl_t` control word |
| `des_pkg.sv` | the FIPS 46-3 tables (IP, IP^-1, E, P, PC-1, PC-2, S-boxes, shift schedule) |
| `aes_pkg.sv` | AES S-box and its inverse, `xtime`, `sub_word`, `mix_col`, `inv_mix_col` |
| `permutation_unit.sv` | fixed bit permutation given as a table parameter (wiring only) |
| `des_f.sv` | the DES round function f(R,K): E, key XOR, S1..S8, P |
| `des_key_schedule.sv` | subkey K(round+1) for any round, computed directly from the key |
| `des_core.sv` | iterative DES, one round per clock, encrypt and decrypt |
| `tdes_core.sv` | TDES with three keys (E-D-E / D-E-D), three rounds per clock |
| `aes_core.sv` | AES-128 encryption and decryption, one state column per clock |
| `crypto_unit.sv` | turns a block cipher into a 32-bit word encrypter/decrypter |
| `alu.sv`, `sign_extender.sv`, `control_unit.sv` | datapath and decoding |
| `register_file.sv`, `key_register.sv`, `instr_mem.sv`, `data_mem.sv` | storage |
| `forwarding_unit.sv`, `hazard_unit.sv` | data forwarding, stalls and flushes |
| `program_counter.sv`, `clock_gate.sv`, `io_unit.sv` | PC, clock gating cell, host port |
| `mips_crypto_top.sv` | the processor |

## How a 32-bit word is enciphered

The ciphers work on 64-bit (DES, TDES) or 128-bit (AES) blocks, but every instruction
and data word is 32 bits. The processor still has to encipher words one at a time, at
any address, and in the same number of cycles whether it is reading or writing. So
`crypto_unit` uses the block cipher as a keystream generator, the way counter mode
does:

```
keystream(addr) = low 32 bits of  Cipher_K( {DOMAIN, byte address}, zero-extended to the block )
word_out        = word_in XOR keystream(addr)
```

- `DOMAIN` is 8'h01 for instruction fetch and 8'h02 for data memory. Code and data at
  the same address therefore use different keystreams.
- Encryption and decryption are the same XOR. The memory-stage encrypter and decrypter
  both use domain 8'h02, so a word stored with `SW` reads back correctly with `LW`.
- Only the cipher's forward direction is used. The cores' decrypt inputs are tied
  low inside `crypto_unit`.
- Keys come from the key register. DES uses `{word1, word0}`. TDES uses
  `{w1,w0}`, `{w3,w2}`, `{w5,w4}` as K1, K2, K3. AES-128 uses `{w3,w2,w1,w0}`.

To encrypt a program offline, XOR each instruction word at byte address `a` with the
low 32 bits of `Cipher_K({24'd0, 8'h01, a})` (DES/TDES, 64-bit block). For AES the
block is `{88'd0, 8'h01, a}`. In both cases the domain byte sits in bits 39:32.

**Handshake.** While `req` is high the unit makes sure it holds the keystream for
`addr`. Once it does, `ready` is high in the same cycle and `dout` is valid. The
unit keeps the last keystream, so a second access to the same address costs nothing.
A key-register write (`key_wr`) throws the kept keystream away. It also marks any
result still in flight as stale.

A miss costs 1 cycle to start the cipher, plus the cipher's latency, plus 1 cycle to
capture the result:

| cipher | core latency | miss latency | encrypted fetch interval |
|---|---|---|---|
| DES | 16 | 18 | 19 cycles per instruction |
| TDES | 16 (3 rounds/clock) | 18 | 19 |
| AES-128 | 40 (4 clocks/round) | 42 | 43 |

The published figures are 16 cycles for the DES/TDES cipher block, with 19 to 21 cycles
per instruction. For AES they are 43 cycles for the cipher block, with 46 to 48 per
instruction. The DES and TDES numbers above match those. AES here is 3 cycles faster
than published.

## The pipeline

The five stages are IF, ID, EXE, MEM and WB. Each pipeline register is a packed struct
(`ifid_t`, `idex_t`, `exmem_t`, `memwb_t`) with a clock enable.

- **Forwarding.** ALU results are forwarded from EXE/MEM and MEM/WB. Select code
  `2'b10` means EXE/MEM and `2'b01` means MEM/WB. The register file also writes
  through: a register read in the same cycle as its write returns the new value.
- **Load-use.** A load (`LW`, `LKLW`, `LKUW`) followed directly by an instruction that
  reads the load's destination holds that instruction in ID for one cycle.
- **Branches and JR** are predicted not taken and resolved in EXE, with forwarded
  operands. When taken, they flush IF/ID and ID/EXE. There is no delay slot.
- **J, JAL and CRYPT** redirect from ID and flush IF/ID. `CRYPT` redirects to its own
  PC+4. The following instruction is therefore fetched again under the new crypt mode.
  Without this, a word fetched under the old mode would be decoded wrongly.
- **Crypto stalls.** While the fetch decrypter is not ready, IF/ID receives bubbles
  and the PC holds. While a memory-stage cipher is not ready, the whole pipeline
  freezes.

The hazard unit decides in this priority order:
1. Not running.
2. Memory-stage cipher wait.
3. EXE redirect.
4. Load-use.
5. ID redirect.
6. Fetch wait.

**Crypt mode** is loaded from the `crypt_enable` pin while `reset_n` is low. After
that, `CRYPT imm26` changes it: a nonzero operand turns it on, zero turns it off. Each
instruction carries the mode it was decoded under (`crypt_on`) down the pipeline. The
memory stage then enciphers or deciphers according to that instruction's own mode,
not the mode at the time it reaches MEM.

## The memory-stage bypass

This low-power rule comes from the published design. After a store, branch or jump,
the memory stage stays idle until the next load. Arithmetic results in that stretch
skip it: they go straight from EXE into MEM/WB, and EXE/MEM is held at zero so that
nothing in MEM switches.

Implementation:

- **The flag.** A flag is set when `SW`, `BEQ`, `BNE`, `J`, `JR` or `CRYPT` leaves ID.
  It is cleared when `LW`, `LKLW` or `LKUW` leaves ID.
- **Which instructions bypass.** An arithmetic instruction (R-type ALU op, arithmetic
  immediate, or `JAL`, which writes its link) decoded while the flag is set is marked
  `bypass` in ID/EXE. In EXE its result is written into MEM/WB directly, and EXE/MEM
  is loaded with zero.
- **Why the rule is safe.** The instruction ahead of a bypassing one is the store,
  jump or branch that set the flag, or another bypassing instruction. None of these
  writes a register through MEM/WB, so both can never claim MEM/WB in the same cycle.
  The concurrent assertion `bypass_no_conflict` in the top module checks this.
- **Forwarding still works.** A bypassing result is in MEM/WB one cycle early, and the
  forwarding unit takes it from there.

## Instruction set

All instructions are 32 bits wide in the standard R/I/J formats. Where the published
opcode table is self-contradictory, its binary column is used. Opcodes it gives to
several instructions at once were spread over the standard MIPS codes or free ones.

| instruction | opcode | notes |
|---|---|---|
| `ADD SUB AND OR NOR SLT` | 000000 | funct 0x20, 0x22, 0x24, 0x25, 0x27, 0x2A |
| `SLL rd, rs, shamt` / `SRL` | 000000 | funct 0x00 / 0x02; the shifted register is **rs** |
| `JR rs` | 000000 | funct 0x08 |
| `J target` / `JAL target` | 000010 / 000011 | JAL writes PC+4 to $31 |
| `BEQ` / `BNE` | 000100 / 000101 | offset in words from PC+4 |
| `ADDI` `SUBI` `SLTI` | 001000 / 001001 / 001010 | immediate sign-extended |
| `ANDI` `ORI` `NORI` | 001100 / 001101 / 001110 | immediate zero-extended |
| `LW` / `SW` | 100011 / 101011 | |
| `LKLW rt, imm(rs)` | 111100 | load a word from data memory into key word 2*rt |
| `LKUW rt, imm(rs)` | 111110 | same, into key word 2*rt+1 |
| `CRYPT imm26` | 111111 | crypt mode = (imm26 != 0) |

- Memory addresses are byte addresses, and only words are accessed. Each memory holds
  256 bytes (64 words). Addresses wrap at the memory size.
- In the key loads, `rt` names a 64-bit key slot (0..2) rather than a register. Like
  `LW`, a key load in crypt mode passes through the decrypter, so keys can be stored
  enciphered under the current key.
- An all-zero word (`sll $0,$0,0`) and any unknown code do nothing.
- The published instruction table lists 4 cycles for arithmetic instructions and
  stores, 3 for branches and jumps, and 5 for loads. These are the pipeline stages
  each one occupies. Here, an arithmetic instruction uses 4 stages when it bypasses
  MEM. A branch finishes its work in EXE. A jump is done in ID. A load uses all five
  stages.

## Host port and pins

| pin | meaning |
|---|---|
| `clk` | clock |
| `reset_n` | 0 = reset/load mode, 1 = running mode |
| `start` | level enable of the running mode (0 freezes the pipeline) |
| `crypt_enable` | crypt mode to start with, sampled in reset mode |
| `ready` | the pipeline advanced this cycle (no cipher wait, no load-use wait) |
| `host_addr[9:0]`, `host_wdata[31:0]`, `host_rdata[31:0]`, `host_we`, `host_re` | load port |

**Reset mode.** While `reset_n` is low, the pipeline is cleared, the PC is 0, and
`io_unit` owns the storage. The address map is:
- `host_addr[9:8] = 0`: instruction memory, at byte address `[7:0]`.
- `= 1`: data memory.
- `= 2`: register `[6:2]`.
- `= 3`: key word `[4:2]`.

**Timing.** A request is first latched in buffer registers. A write lands one cycle
later. Read data appears on `host_rdata` two cycles after `host_re`. Keep `reset_n`
low for one more cycle after the last write. Registers and the data memory can be
read back after a run by dropping `reset_n` again. The memories keep their contents
across reset.

The published design has a single bidirectional 32-bit data bus. Here it is split into
`host_wdata` and `host_rdata`; a tri-state pad belongs to the chip's I/O ring.

## Clock gating

`clock_gate` is the usual latch-and-AND gate: the latch is transparent while `clk` is
low, and `gclk = clk & en_latched`. The register file, the two memories and the key
register are clocked through one each, so they do not switch in cycles that do not
write them. The latch is intended, and a synthesis flow would replace the module with
the library's clock-gating cell. The pipeline registers use ordinary clock enables.

## Departures and open points

- **AES** is AES-128 only, at 40 cycles per encryption against the published 43.
  Decryption takes 50 cycles: 10 to expand the key up to the last round key, then 40
  inverse rounds. The published text also mentions 192- and 256-bit keys, which are not
  built; its AES evaluation uses 128-bit keys.
- **Word-to-block mapping.** The keystream construction, and the domain constants in
  it, are this design's own. The published description places the encrypt and decrypt
  cores but does not say how a 32-bit word is mapped onto a cipher block.
- **Cycle counts.** The encrypted-instruction interval is 19 cycles for DES/TDES,
  whatever the instruction type. The published design gives 19 (J), 20 (R) and 21 (I).
- **Opcodes.** The opcodes of SUBI, SLTI, ANDI, ORI, NORI, BNE, JAL and JR, the key
  word index for `LKLW`/`LKUW`, the host address map, and the meaning of `start` and
  `ready` are this design's choices.
- **Not modelled.** Clock rates, area and power figures (218 MHz DES, 209 MHz TDES and
  210 MHz AES on an FPGA) are outside the RTL. Voltage-frequency scaling is also not
  modelled.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog. The cipher testbenches
check against the FIPS 46-3 / FIPS 197 example vectors and against a behavioural DES
model (`tb/des_model_pkg.sv`). They also check the cycle counts.

`tb_mips_crypto_top` runs the processor at its default size: DES, 256-byte memories.
It does the following:
1. Loads a program through the host port.
2. Runs every instruction class.
3. Loads a key with `LKLW`/`LKUW`.
4. Switches to crypt mode and executes enciphered instructions.
5. Stores and loads enciphered data.
6. Switches back and reads the ciphertext plainly.

It compares registers and memory with values worked out in the testbench. It also
counts forwards, load-use stalls, bypassed instructions, flushes, jumps, cipher waits,
mode switches and gated register-file cycles, and checks the 19-cycle encrypted fetch
interval.

`tb_cipher_configs` builds the processor twice, once with TDES and once with AES-128.
The helper `tb/cipher_config_run.sv` runs the same encrypted program on each build. The
program loads all six key words with `LKLW`/`LKUW` and runs enciphered instructions, an
enciphered store and a deciphering load. The results are checked against `des_model_pkg`
(three calls, E-D-E) and against an independent AES model, `tb/aes_model_pkg.sv`. That
testbench also checks the fetch intervals: 19 clocks with TDES and 43 with AES.

With verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/mips_pkg.sv rtl/des_pkg.sv rtl/aes_pkg.sv tb/des_model_pkg.sv \
  tb/aes_model_pkg.sv tb/tb_mips_crypto_top.sv --top-module tb_mips_crypto_top -Mdir obj -o sim
./obj/sim            # add +trace for a per-cycle pipeline trace
```

Replace `tb_mips_crypto_top` with any other testbench name to run that block's test.
To build another cipher into the processor, set the top's parameter:
`mips_crypto_top #(.ALG(mips_pkg::ALG_TDES))` or `ALG_AES`.
