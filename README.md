# EVMx in SystemVerilog: a hardware Ethereum virtual machine

Ethereum smart contracts are compiled to EVM bytecode. A software EVM runs
this bytecode one opcode at a time over a 256-bit stack machine. EVMx puts
that machine straight into logic. There is no decoder, scheduler or
out-of-order engine. A single controller fetches one opcode at a time from an
on-chip bytecode memory and moves 32-byte words between a handful of
dedicated units: stack, memory, storage, ALU, Keccak hasher, and an
address-derivation path for `CREATE` and `CREATE2`. The aim is low latency
per opcode and small area. Arithmetic uses no DSP multipliers: multiplication
is shift-and-add and division is non-restoring. At the reference clock of
142.86 MHz (7 ns), a stack move or an environment read costs a single cycle.

This repository holds synthesizable RTL for that machine, plus a
self-checking testbench for every unit and one for the whole processor.

## Datapath at a glance

```
 bytcd ──► BCM ──byte──► pad ──┐                         ┌──► STR ──► oStore
            ▲              r0 ─┤                         │
            │PC                ├─► mux ─► STK ─► r1..r3 ─┼──► ALU ─► r4 ─► (mux)
            │                  │          ▲              ├──► MEM ─► r5 ─► KEC ─► ADR ─► (mux)
  FSM ◄─────┘  GS ◄── gval     │          │ salt         │     │                ▲
                               └── KEC, ADR, r4, r2      │     └──► RTN ─► retVal
                                                 sAddr,sNoc ─► RPL ───────────┤
                                                 sAddr,salt,r6 ─► δ (k) ──────┘
```

| Block | Module | Role |
|---|---|---|
| BCM | `evmx_bcm` | 32768 × 8 bytecode memory. The host writes it through `bytcd`; it is read at the PC. |
| PC | `evmx_pc` | 15-bit program counter. It counts up, or loads a jump target taken from the stack. |
| pad, r0 | in `evmx_fsm` | `pad` zero-extends one code byte into a stack word (PUSH1). `r0` shifts in the bytes of PUSH2–PUSH32. |
| STK | `evmx_stack` | 1024 × 256-bit LIFO. It can read and write any of the top 17 entries (DUPn/SWAPn). |
| r1–r4 | in `evmx_fsm` | Operand registers. r1 is the first popped value, also the MSTORE data and the `val` output. r2 is a size. r3 is an offset, key or first ALU operand. r4 holds the ALU result. |
| ALU | `evmx_alu` | 256-bit EVM arithmetic, comparisons, logic, BYTE and shifts. MUL, DIV and MOD are iterative. |
| MEM | `evmx_mem` | 2768-byte, byte-addressed working memory. It takes 1- to 32-byte writes and 32-byte reads at offset `oft`. |
| STR | `evmx_storage` | 1024 × 256-bit persistent storage. The low 10 key bits address it. |
| RTN | `evmx_rtn` | Return buffer. It receives RETURN/REVERT data from MEM; the host reads it as `retVal`. |
| GS | `evmx_gas` | Gas counter. It is loaded with `gval`, then charged by the controller. |
| r5 | in `evmx_fsm` | Left-shift register that streams MEM words byte by byte into KEC. |
| KEC | `evmx_keccak` | Keccak256 (Ethereum's padding), one round per clock. |
| ADR | in `evmx_fsm` | Cuts a 20-byte account address out of a digest. |
| r6, δ | in `evmx_fsm` | r6 holds the init-code digest `d`. δ builds `k = 0xff ‖ sAddr ‖ salt ‖ d` for CREATE2. |
| RPL | `evmx_rlp` | RLP encoding of `[sAddr, sNoc]` for CREATE. |
| FSM | `evmx_fsm` | The controller. |
| top | `evmx_top` | Wires the blocks together and exposes the host interface. |

`evmx_pkg` holds the shared items: the word type, opcode numbers, static gas
table, ALU operation codes and halt status codes.

## Host interface and one execution

1. **Load code.** Write it byte by byte with `bytcd_we`/`bytcd_addr`/`bytcd_data`,
   starting at address 0. A write to address 0 starts a new code image. Bytes
   above the highest address written since then read as `0x00` (STOP), and
   CODESIZE returns that length.
2. **Set up the environment.** Drive these inputs:
   - `init_data[0..2]`: the words returned by ADDRESS, CALLER and CALLVALUE.
   - `s_addr`, `s_noc`: the creating account's address and nonce, used by
     CREATE and CREATE2.
3. **Start.** Pulse `start` with the gas limit on `gval`. The controller then
   does the following:
   - resets the PC to zero;
   - empties the stack;
   - loads the gas counter;
   - zeroes MEM with a 32-bytes-per-cycle sweep (87 cycles at 2768 bytes).
4. **Run.** `busy` is high while the program runs. Every opcode dispatch pulses
   `op_fetch` with the opcode on `op_cur`.
5. **Halt.** `done` pulses and `status` gives the reason:

   | status | meaning |
   |---|---|
   | 1 STOPPED | STOP, or execution ran off the end of the code |
   | 2 RETURNED | RETURN; the data is in RTN |
   | 3 REVERTED | REVERT; the data is in RTN |
   | 4 OUT_OF_GAS | the next charge exceeded the remaining gas |
   | 5 INVALID | undefined opcode, stack underflow/overflow, or jump to a non-JUMPDEST |
   | 6 CAPACITY | a memory access beyond the 2768 bytes this hardware holds |

6. **Read results.**
   - `ret_val` gives 32 bytes of returned data at byte address `ret_addr`.
     Bytes at or past `ret_len` read as zero.
   - `o_store` gives the storage value at `ostore_key`.
   - `gas_left` gives the remaining gas.

Storage keeps its contents from one execution to the next (it starts at
zero). Memory and stack start empty on every `start`.

When CREATE or CREATE2 finishes, the new address is pushed and `val_valid`
pulses, with the value (wei) passed to the new contract on `val`.

## Timing of individual opcodes

The controller is written so that each opcode takes a fixed number of cycles
from its dispatch to the next dispatch. For the frequently used opcodes these
counts equal the published EVMx times at 7 ns:

| Opcode | Cycles | ns @ 7 ns | What the cycles do |
|---|---|---|---|
| POP, ADDRESS, CALLER, CALLVALUE | 1 | 7 | dispatch and stack update in the same cycle |
| PUSH1 (PUSHn) | 2 (1+n) | 14 | dispatch, then one cycle per operand byte through `pad`/`r0` |
| DUP1 | 3 | 21 | dispatch, read depth n into r1, push |
| SLOAD | 3 | 21 | dispatch, pop key into r3, replace top with STR[key] |
| ADD, SUB, EQ, AND, OR | 4 | 28 | dispatch, pop a into r3, ALU → r4, replace top |
| SWAP1 | 4 | 28 | dispatch, read both entries, write them back in two cycles |
| MSTORE | 35 | 245 | dispatch, pop offset, 32 cycles of expansion-gas arithmetic, charge and write |
| MLOAD | 37 | 259 | as MSTORE, then read MEM into r1 and replace the top |

MLOAD and MSTORE spend 32 cycles computing the memory-expansion gas,
`3·w + ⌊w²/512⌋` for `w` 32-byte words. The w² term comes from a 32-step
shift-and-add squaring, one multiplier bit per cycle. This is the same
shift-and-add technique the ALU uses. It runs for MSTORE8, KECCAK256,
RETURN, REVERT, CREATE and CREATE2 as well. The published cycle budgets for
MLOAD and MSTORE come from the original design, but how that design spends
them is not published: this squaring is this implementation's way of filling
them with useful work.

MUL, DIV, MOD, SDIV, SMOD, ADDMOD, MULMOD and EXP add their iterations (see the ALU section
below). KECCAK256 costs about one cycle per hashed byte, plus 24 cycles per
136-byte block and the set-up above. CODECOPY costs one cycle per copied
byte after the same set-up. It reads the code through the BCM's second read
port, the one otherwise used to check jump targets. CODESIZE, MSIZE and GAS
take 1 cycle, like ADDRESS.

## ALU: shift-and-add and non-restoring division

All operands are 256 bits. `a` is the top of the stack, `b` the next entry.

- **Single-cycle operations.** ADD, SUB, LT, GT, SLT, SGT, EQ, ISZERO, AND, OR,
  XOR, NOT, BYTE, SHL, SHR and SAR are combinational. `done` is high in the
  cycle `start` is.
- **MUL.** Shift-and-add over the multiplier bits. Each cycle adds the shifted
  multiplicand when the current multiplier bit is set. The loop stops as soon
  as the remaining multiplier bits are all zero, so a multiply by a small
  constant finishes in a few cycles: by 5 it takes 4 cycles.
- **DIV / MOD.** Non-restoring division over 256 cycles. Each cycle shifts the
  next dividend bit into the partial remainder. It then subtracts the divisor
  if the remainder is non-negative, or adds it back if it is negative. The
  quotient bit is the inverse of the new sign. A final correction adds the
  divisor back once if the remainder ended negative.
  - Division by a power of two is detected with `b & (b-1) == 0`. It is done in
    the start cycle: DIV is a right shift, MOD is a mask.
  - Division or modulo by zero returns zero, as the EVM defines.

Whole DIV takes 257 cycles from `start` to `done`. The testbench checks this,
as well as the 1-cycle power-of-two path.

- **SDIV / SMOD.** These divide the magnitudes on the same divider, then fix the
  sign. The quotient is negative when the operand signs differ. The remainder
  takes the sign of the dividend. The power-of-two shortcut applies to the
  divisor's magnitude.
- **EXP.** Square-and-multiply from the exponent's least significant bit. When
  the current bit is set, the result is multiplied by the base. The base is
  then squared, unless no higher bit remains. Every product runs on the
  shift-and-add multiplier, so EXP's time depends on the exponent length and
  on the operand bit patterns. EXP with a zero exponent finishes at once.
- **SIGNEXTEND** is combinational.
- **ADDMOD / MULMOD.** The modulus c comes in on a third ALU input. Both
  operations first reduce a modulo c on the divider. ADDMOD then reduces b the
  same way, adds the two remainders and subtracts c once if needed. MULMOD
  instead runs an interleaved modular multiplication, taking one bit of b per
  cycle from the top: r = 2r mod c, then r = r + a mod c when the bit is set.
  Each takes 513 ALU cycles. Because no intermediate value exceeds 257 bits,
  the 512-bit product never exists. A zero modulus gives 0 at once.

## Keccak, CREATE and CREATE2

`evmx_keccak` absorbs one byte per cycle into a 1600-bit state at rate 136
bytes. A full block starts the permutation: 24 rounds, one per cycle, with
`ready` low. `finish` applies Keccak's `0x01 … 0x80` padding and permutes the
last block. This is Ethereum's Keccak256, not SHA3-256. Bytes reach the
hasher from one of two shift registers:

- **r5** streams memory. It loads a 32-byte MEM word, then shifts one byte a
  cycle into KEC, and loads the next word.
- **The 85-byte δ register** streams internally built messages.

**KECCAK256** hashes `MEM[offset, offset+size)` through r5 and pushes the
digest.

**CREATE** hashes the RLP list `[sAddr, sNoc]` built by `evmx_rlp`:

- a list prefix `0xc0+len`;
- `0x94` and the 20 address bytes;
- the nonce as a single byte below `0x80`, as `0x80` for zero, or as
  `0x80+L` followed by its L bytes.

The hash goes through δ. The low 20 bytes of the digest, through ADR, are the
new address.

**CREATE2** follows the published step sequence:

1. pop `value` into r1 (also driven on `val`);
2. pop `offset` into r3;
3. pop `size` into r2;
4. hash the init code `MEM[offset, offset+size)` through r5 into KEC;
5. load the digest `d` into r6 while popping `salt` into δ, which now holds
   `0xff ‖ sAddr ‖ salt`;
6. next cycle, copy `d` from r6 into the low 32 bytes of δ;
7. stream all 85 bytes of δ through KEC;
8. push the low 20 bytes of that digest, through ADR, as the new address.

The addresses match Ethereum's rules. The testbench checks them against
independently computed CREATE and CREATE2 addresses.

## Gas

GS is a 64-bit down-counter. Before each opcode the controller asks whether
the static cost is covered. If it is not, execution halts with OUT_OF_GAS and
the counter is emptied. The costs are:

- the standard Ethereum static cost of each opcode;
- memory expansion `3·w + ⌊w²/512⌋`, charged as the difference from the
  highest size reached so far;
- 6 gas per hashed word for KECCAK256 and CREATE2, and 3 per copied word for
  CODECOPY;
- 50 gas per significant exponent byte for EXP, charged when the exponent is
  popped;
- 100 gas for SLOAD/SSTORE, priced as warm accesses (no access lists and no
  SSTORE refund schedule);
- 32000 gas for CREATE/CREATE2.

## Supported opcodes

- **Arithmetic and logic:** STOP, ADD, MUL, SUB, DIV, SDIV, MOD, SMOD, ADDMOD,
  MULMOD, EXP, SIGNEXTEND, LT, GT, SLT, SGT, EQ, ISZERO, AND, OR, XOR, NOT,
  BYTE, SHL, SHR, SAR.
- **Hashing and environment:** KECCAK256, ADDRESS, CALLER, CALLVALUE, CODESIZE,
  CODECOPY, MSIZE, GAS.
- **Stack, memory and storage:** POP, MLOAD, MSTORE, MSTORE8, SLOAD, SSTORE.
- **Control flow:** JUMP, JUMPI, PC, JUMPDEST.
- **Stack moves:** PUSH0–PUSH32, DUP1–DUP16, SWAP1–SWAP16.
- **Contract creation and exit:** CREATE, RETURN, CREATE2, REVERT.

Every other opcode halts with status INVALID.

## Where this RTL departs from the published design, and what it lacks

- **Memory size.** The text gives 2768 one-byte words, but the resource
  table's 288 kbits suggests 32768. The RTL follows the text. `MEM_BYTES` on
  the top changes it, and RTN has the same size.
- **Address bytes.** The CREATE2 description says the *first* 20 digest bytes
  form the address. Ethereum uses the *last* 20, and the RTL follows Ethereum.
- **Reads are combinational** in BCM, STK, MEM, STR and RTN. This is what lets
  the one-cycle opcodes finish in one cycle. A block-RAM mapping would need
  the controller to be retimed.
- **Opcode coverage.** The original design is described as executing the full
  opcode set. This RTL has the subset listed above. The following are not
  built: CALL and its relatives, CALLDATA*, RETURNDATA*, BALANCE and the other
  world-state queries, LOG*, SELFDESTRUCT and transient
  storage. Most of these need call data, sub-calls or a world state, which
  this processor does not hold.
- **initData.** The block diagram also routes `initData` towards the memory
  input. That path is not built: initData here only supplies
  ADDRESS/CALLER/CALLVALUE.
- **CREATE/CREATE2 side effects.** They compute and push the new address and
  present `val`. They do not deploy code, run the init code, bump the nonce or
  move value.
- **JUMPDEST check.** It looks only at the target byte, so a `0x5b` inside PUSH
  data is accepted.
- **Storage aliasing.** Storage keys alias modulo 1024, as the published
  design accepts.
- **Design-specific choices.** The reset, the status codes and the trace and
  `ret_addr`/`ret_len` ports belong to this implementation.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/evmx_pkg.sv rtl/evmx_*.sv \
          tb/tb_evmx_top.sv --top-module tb_evmx_top -o sim
./obj_dir/sim
```

Substitute any unit testbench for `tb_evmx_top`: `tb_evmx_alu`,
`tb_evmx_keccak`, `tb_evmx_stack`, `tb_evmx_mem`, `tb_evmx_storage`,
`tb_evmx_rtn`, `tb_evmx_bcm`, `tb_evmx_pc`, `tb_evmx_gas` or `tb_evmx_rlp`.
Only the package and the unit under test are needed. Alternatively, list all
of `rtl/` and name the top module.

`tb_evmx_top` runs the processor at its default sizes. It assembles a set of
small programs and checks status, gas, returned data, storage and `val`
against values worked out independently. It also checks the per-opcode cycle
counts in the table above. It counts the following mechanisms, each of which
must occur at least once:

- PUSH through pad and through r0;
- iterative MUL and DIV, and the power-of-two shortcut;
- square-and-multiply EXP, signed division, ADDMOD/MULMOD, and CODECOPY;
- taken and untaken jumps;
- memory expansion;
- multi-block hashing;
- CREATE, CREATE2, RETURN and REVERT;
- out of gas, undefined opcode, stack underflow and overflow, bad jump, and
  capacity.

It also carries a list of the 45 opcodes most often executed on Ethereum
mainnet. The 42 of them that this processor builds must each run at least
once. The three missing ones are CALL, CALLDATASIZE and RETURNDATASIZE.

## Changing sizes

`evmx_top` parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `BCM_DEPTH` | 32768 | code bytes. The PC width is `$clog2` of this. |
| `STK_DEPTH` | 1024 | stack entries |
| `MEM_BYTES` | 2768 | MEM and RTN bytes |
| `STR_DEPTH` | 1024 | storage entries. The key bits used are `$clog2` of this. |
| `GW` | 64 | gas counter width |
| `NW` | 64 | nonce width |
| `INIT_N` | 3 | initData words |

The testbench's expected cycle counts assume the defaults. The MEM clear
sweep takes `⌈MEM_BYTES/32⌉` cycles.
