# Encrypted instruction stream with run-time encrypted code generation

This RTL adds code encryption to a small in-order RISC-V (RV32IM) core. The
design follows the PolEn architecture of Morel, Couroussé and Hiscock. Programs
are stored in memory encrypted with the Trivium stream cipher, under a key that
never leaves the chip. Instructions are decrypted inside the fetch stage, so a
dump of flash or DRAM shows only ciphertext.

Code encryption on its own fits badly with *code polymorphism*, a side-channel
countermeasure. Polymorphism regenerates a protected function at run time, and
each new version uses different instruction choices, register allocation and
noise instructions. The generator would write plaintext into memory, where it
could be read. So the core gets a second cipher in its execute stage. With it
the generator can emit *encrypted* instructions directly, using the same key
and never exposing that key to software.

The extension is four instructions and five hardware pieces:

| piece | file | role |
|---|---|---|
| Trivium core | `rtl/trivium_core.sv` | 288-bit cipher state; initialisation `I_k(IV)`; one 32-bit keystream word per instruction |
| fetch decryptor | `rtl/fetch_decrypt.sv` | reads a basic block's IV after each taken branch, re-initialises, XORs fetched words |
| execute encryptor | `rtl/exec_crypto.sv` | `initBB` and `enc_word`, with its own Trivium core and IV generator (`rtl/prng.sv`) |
| mode controller | `rtl/dec_mode_ctrl.sv` | `enable_dec` / `disable_dec`, applied at the next taken control flow |
| key store | `rtl/key_store.sv` | write-once key register visible only to the two ciphers |
| decoder | `rtl/polen_isa_decoder.sv` | recognises the four extension instructions |
| top | `rtl/polen_ext.sv` | wires the pieces together; ports toward the host pipeline |

Shared types, constants and the Trivium round function are in `rtl/polen_pkg.sv`.

## How encrypted code is laid out

A stream cipher needs the right state to decrypt a word. In straight-line code
the state simply advances by one keystream word per instruction. At a taken
branch, the state at the target cannot be derived from the state at the
branch. So encryption restarts at every basic block:

```
  block address + 0   IV word 0   = IV[31:0]
                + 4   IV word 1   = IV[63:32]
                + 8   IV word 2   = {16'h0000, IV[79:64]}
                + 12  instr 0 XOR ks0
                + 16  instr 1 XOR ks1      ks_i = i-th 32-bit keystream word
                ...                              after I_k(IV)
```

A branch, jump, call or return targets the block address, which is the IV slot.
The compiler adds an explicit jump wherever a block could be entered by falling
through from another, so every encrypted block is entered by a taken control
flow. Call sites also get a fresh IV after the call, so that the return lands
on a new block.

## Fetch side: what happens at a taken branch

`fetch_decrypt` sits between instruction memory and decode. It uses valid/ready
handshakes on both sides.

* **Plaintext stream:** data passes straight through with no added latency.
* **Encrypted stream:**
  1. The first three words fetched after the redirect are taken as the IV. They are not sent to decode.
  2. With the third word, `I_k(IV)` starts: key and IV are loaded, and the 1152 warm-up rounds run W rounds per clock.
  3. Fetch stalls (`busy`) until the cipher is ready.
  4. Each fetched word is then XORed with the current keystream word and handed to decode. The state advances 32 rounds per instruction, so decryption keeps up with one instruction per cycle.

The host PC generator does not need to know about any of this: it keeps
incrementing through the IV words, and the first instruction sits at
target + 12. Any word on the bus during the redirect cycle belongs to the old
stream and is dropped.

Cost of one taken branch into encrypted code, with a memory that never stalls:
the first instruction of the target block reaches decode `3 + 1152/W` cycles
after the redirect cycle.

| build | keystream bits / clock | `I_k` cycles | first instruction after redirect |
|---|---|---|---|
| `W = 32` (default, area-optimised) | 32 | 36 | 39 cycles |
| `W = 128` (performance-optimised) | 128 | 9 | 12 cycles |

The published evaluation counts the re-initialisation as 35 and 9 cycles. 1152
rounds at 32 per clock are 36 cycles, so the W = 32 build is one cycle slower
than that figure.

The per-branch cost gives a simple model of the slowdown. Take a function of
n instructions with b taken control flows, and a memory that never stalls. It
runs in `n + b` cycles in plaintext and `n + b·(3 + 1152/W)` cycles encrypted.
The published model, `O = 1 + (k_T − 1)·b/n`, leaves out the IV fetches.

`tb/tb_overhead.sv` builds a function like the 8-bit AES of the published
evaluation: 506 taken branches in about 26,000 instructions. On the extension
it measures:

| build | measured slowdown | published model |
|---|---|---|
| W = 32 | 1.72 | 1.66 (k_T = 35) |
| W = 128 | 1.21 | 1.15 (k_T = 9) |

## Leaving and re-entering encrypted code

Encrypted code can call a plaintext function, for example a library routine.
The mode switch cannot happen at once, because the instructions between the
switch and the call are still encrypted. Instead:

* `enable_dec` / `disable_dec` only set a *pending* mode.
* The next taken control flow copies the pending mode into the active mode.
* The branch target is then fetched in the new mode. In encrypted mode that means the IV is read first.

The call sequence is therefore:

```
   (encrypted)  disable_dec
                call f_unsec          -> f_unsec runs in plaintext
   (plaintext)  enable_dec            <- f_unsec returns here (plaintext return path)
                j   .Lret             -> decryption restarts with .Lret's IV
   (encrypted) .Lret: IV, rest of the caller
```

The return cannot switch the mode itself, because the callee does not know who
called it. That is why the caller carries the plaintext `enable_dec; j` sequence.
After reset the core fetches plaintext (`DEC_AT_RESET = 0`). The boot code
enters encrypted code with `enable_dec` and a jump.

## Generating encrypted code at run time

A code generator writes each basic block of a new function instance as follows:

1. **`initBB rs1`**
   * Takes a fresh 80-bit IV from the IV generator.
   * Stores it as the three-word slot at `rs1`, `rs1+4` and `rs1+8` through the unit's store port (`st_*`).
   * Starts `I_k(IV)` on the execute-stage cipher.

   It completes when the third store is accepted: three cycles when the port does not stall.
2. **`enc_word rd, rs1`** for each instruction.
   * Returns `rs1 XOR keystream` and advances the cipher state.
   * The generator stores the result after the IV slot with an ordinary store.
   * An `enc_word` issued while the cipher is still initialising stalls execute. The initialisation began with the first IV store, so the first `enc_word` after an `initBB` waits `1152/W - 2` cycles.

*Forward jumps* need special handling. Their target address is unknown when
the jump is emitted, because noise instructions may still be inserted before
the target. The generator encrypts the word `0` in the jump's slot. Once the
target is known, it patches the stored word by XORing in the real encoding.
This works because encryption is an XOR with a keystream: E(0) XOR j = E(j).
The hardware needs nothing extra for this.

Each cipher instance keeps its own state, so generating code does not disturb
the decryption of the generator's own encrypted code. The published
description draws one state per pipeline stage, as built here. It also notes
that a scalar core could share a single instance, and that the two instances
may use different widths. `DEC_W` and `ENC_W` are therefore independent
parameters.

## Instruction encodings

All four instructions are R-type in the RISC-V *custom-0* opcode space
(`opcode = 0001011`, `funct7 = 0`):

| funct3 | instruction | operands | result |
|---|---|---|---|
| 000 | `initBB`      | rs1 = IV slot address | rd may receive IV word 0 |
| 001 | `enc_word`    | rs1 = plaintext word  | rd = encrypted word |
| 010 | `enable_dec`  | – | – |
| 011 | `disable_dec` | – | – |

The instruction names and behaviour follow the architecture. The bit encodings
are this implementation's own.

## Trivium

`trivium_core` implements the eStream Trivium round function with a 288-bit
state. Initialisation loads:

* key bit i into s(i+1);
* IV bit i into s(94+i);
* ones into s286 to s288.

It then runs 1152 rounds. `W` rounds are unrolled per clock, and `W` must be a
multiple of 32 that divides 1152. A second tap after 32 rounds serves the
one-word-per-instruction step. `ks[j]` is output bit z(j+1).

The bit and byte order chosen here differs from the eStream reference code.
The keystream is self-consistent, because both stages and all testbenches use
the same convention, but it does not reproduce published Trivium test vectors.

## Top-level ports (`polen_ext`)

| group | signals | meaning |
|---|---|---|
| key | `key_prog_valid`, `key_prog[79:0]`, `key_locked` | first write after reset sets the key and locks it |
| entropy | `seed_valid`, `seed[127:0]` | XORed into the IV generator state |
| fetch | `imem_valid/imem_data/imem_ready` | fetched words, in address order |
| decode | `instr_valid/instr/instr_ready` | plaintext instructions |
| branch | `cf_taken` | a control-flow instruction is taken; the next fetched word is the first at the target |
| execute | `ex_valid`, `ex_instr`, `ex_rs1` → `ex_is_polen`, `ex_done`, `ex_result` | the host holds an extension instruction in execute until `ex_done` |
| IV stores | `st_valid/st_addr/st_data/st_ready` | three stores per `initBB` |
| status | `dec_active`, `dec_pending`, `fetch_busy`, `enc_ready` | current mode, mode after the next taken control flow, fetch stall, encryptor ready |

Parameters: `DEC_W` and `ENC_W` (default 32), and `DEC_AT_RESET` (default 0).

## What is this design's own

The published architecture gives:

* the block structure of the two stages;
* the cipher and its two widths;
* the IV-per-basic-block scheme and the three-word IV;
* the four instructions and their semantics.

It was evaluated on an instruction-set simulator, not as RTL. The following are choices made here:

* valid/ready handshakes;
* the store port for `initBB`;
* the placement of the 80 IV bits in the 96-bit slot, with the upper 16 bits zero;
* the instruction encodings;
* the write-once key register;
* plaintext mode after reset;
* the cipher bit order.

The **IV generator** is a 128-bit xorshift generator re-seeded from an
external entropy input. It gives fresh, non-repeating IVs in simulation, but it
is *not* a secure random number generator. A product must replace it with a
TRNG-seeded CSPRNG behind the same `iv`/`next` interface.

Not included: the RV32IM pipeline itself, instruction and data memories, and
the physical entropy source. Their signals are ports of `polen_ext`.

## Simulating

Each testbench is self-checking and ends with a `TB_RESULT checks=N failures=M` line.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/polen_pkg.sv tb/tb_triv_ref_pkg.sv tb/tb_polen_ext.sv \
    --top-module tb_polen_ext
./obj_dir/Vtb_polen_ext
```

Replace the testbench file and top module to run the others:

* `tb_trivium_core`: both widths against a bit-serial reference model (`tb/tb_triv_ref_pkg.sv`), plus initialisation latency.
* `tb_fetch_decrypt`: random block streams with random stalls.
* `tb_exec_crypto`: `initBB`/`enc_word` sequences, store back-pressure, forward-jump patch, stall cycle counts.
* `tb_key_store`, `tb_prng`, `tb_polen_isa_decoder`, `tb_dec_mode_ctrl`: the small blocks.
* `tb_polen_ext` (defaults, W = 32) and `tb_polen_ext_w128` (W = 128): end to end. The testbench plays the host core, generates an encrypted code instance with the extension, executes it through the decryptor, and performs a plaintext call and return. It also checks the taken-branch penalty and counts every mechanism.
* `tb_overhead` (with its helper `tb_overhead_run`): the slowdown measurement above. It generates the function with `initBB`/`enc_word`, runs it in plaintext and encrypted for W = 32 and W = 128, checks every instruction and the cycle counts against the model, and prints the generation time.

All runs finish in a few seconds.
