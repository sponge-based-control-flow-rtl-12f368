# Sponge-based control-flow protection: a decrypt stage for a RISC-V fetch path

Code-reuse and fault attacks work by making a processor execute instructions in
an order its program never intended. This design closes that door
cryptographically. The program image is stored encrypted with an authenticated
sponge cipher. The processor decrypts each instruction just after fetch, with a
secret state that depends on every instruction executed so far. If an attacker
skips an instruction, repeats one, changes one, or jumps somewhere the binary was
not encrypted for, the state goes wrong. Every instruction after that then
decrypts to pseudo-random garbage. About three out of four random words are
invalid encodings, so the garbage traps within a couple of cycles.

The RTL here is that decrypt unit: a pipeline stage inserted between instruction
fetch and decode of a small in-order RV32 core, plus the state it needs around
interrupts. The core, the SoC and key storage are not part of it. Their
connections are ports of `scfp_top`.

## The sponge step

The state is 64 bits: a 32-bit *rate* (one instruction) and a 32-bit secret
*capacity* `x`. For every ciphertext word `C_i`:

    {P_i, x_i'} = f({C_i, x_i})          f = PRINCE encryption under the device key
    x_(i+1)     = x_i' ^ Patch_i         Patch_i = 0 unless a patch applies

`P_i` is the plaintext instruction sent to decode. The arrangement is APE-like:
the ciphertext goes into the permutation and the plaintext comes out of it. As a
result, the encryptor has to work *backwards* from the last instruction of each
straight-line block. `f` is the 64-bit PRINCE block cipher with a 128-bit key
`k0||k1`. It is fully unrolled and combinational, so one instruction is
decrypted per clock (`rtl/prince_core.sv`, `rtl/prince_pkg.sv`).

## Patches: how control flow merges

Two paths that reach the same instruction normally arrive with different states.
A *patch* is a 32-bit constant, stored in the image. XORed into the state, it
turns one path's state into the state the target was encrypted for.

* **Protected branches** `BPEQ BPNE BPLT BPLTU BPGE BPGEU` are followed by one
  patch word. Taken: the patch is XORed in. Not taken: it is discarded, and the
  fall-through is encrypted for the unpatched state.
* **Protected jumps** `JALP` and `JALRP` are also followed by one patch word,
  which is always applied. If bit 1 of the target address is set, the first word
  at `target & ~3` is a **second patch** and execution continues one word later.
  This is how indirect calls and returns work. The first patch leads from the
  call site to a chosen constant intermediate state. The second, stored at the
  callee (or at the return site), leads from there to the state the code at that
  address was encrypted for. All callers of one function therefore share one
  entry sequence.
* **Unprotected** `BEQ…BGEU`, `JAL`, `JALR` and `MRET` carry no patch. They are
  legal only where both successors were encrypted for the same state.

The stage, `rtl/scfp_decrypt_stage.sv`, works through a control-flow instruction
like this:

1. Decrypt it and update `x`.
2. For a protected instruction, take the next fetch word as its patch.
3. Hand the instruction to decode.
4. Stall until the core asserts `cf_resolve_i` with `cf_taken_i` and, for jumps,
   `cf_target_patch_i`.

Wrong-path words therefore never enter the state. The penalty is the core's
branch-resolution delay plus one cycle for the patch word.

Instruction encodings (the custom opcode space of RV32):

| instruction | format | opcode | funct3 |
|---|---|---|---|
| BPEQ…BPGEU | B | `0001011` (custom-0) | same as BEQ…BGEU |
| JALP | J | `0101011` (custom-1) | – |
| JALRP | I | `1011011` (custom-2) | `000` |

`rtl/scfp_predecode.sv` sorts each plaintext into one of six classes: none,
branch, jump, protected branch, protected jump, MRET.

## Where the state comes from

The device key never leaves the chip. Each state is derived with the same
cipher, one cycle each:

    derive(dom, addr) = lower 32 bits of f_k({nonce ^ dom, addr})

| domain | when | value |
|---|---|---|
| 0 | `start_i` | `z_I`, the initial program state |
| 1 | `start_i` (second cycle) | `pad`, a mask for the saved interrupt state |
| 2 | `irq_enter_i` | `z_H`, the handler's entry state |
| 3 | `irq_enter_i` (second cycle) | `e`, the state the handler must end in |

The address is the start address, or the handler address for domains 2 and 3.
The first word at the program entry and at each handler is an *entry patch*. It
is XORed into the derived state before the first instruction, so the toolchain
can encrypt the code independently of the nonce. A program binary is thus bound
to one device key and one nonce.

## Interrupts

On `irq_enter_i` the stage saves the interrupted state `z_entry` into
`rtl/scfp_irq_state.sv` and derives `z_H` and `e`. It saves one of two values:

* The tag the core passes in `irq_tag_i`. Every instruction leaves the stage with
  its own entry state on `dec_state_o`, so the core can carry that tag to the
  instruction it will restart at.
* Without a tag, its own next-instruction state. This is allowed only while
  `irq_safe_o` is high, or while the next instruction is still waiting for
  decode.

When the handler's `MRET` resolves, the state becomes

    x = x' ^ e ^ z_entry

A handler that ran as encrypted ends with `x' = e`, so the interrupted program
resumes with exactly `z_entry`. A handler that was attacked leaves a wrong
state, and the error carries on into the interrupted program. Handlers can still
run correctly while the interrupted program is executing garbage, so software
error recovery and scheduling remain possible.

The saved state is kept as `z_entry ^ pad`. That masked value is what the
operating system reads and writes through `csr_rdata_o`, `csr_we_i` and
`csr_wdata_i` for context switches. The plain state is never visible. There is
one save slot, so interrupts do not nest.

## Interface and timing (`scfp_top`)

* **Fetch side:** `fetch_valid_i`, `fetch_word_i`, `fetch_ready_o`.
* **Decode side:** `dec_valid_o`, `dec_instr_o`, `dec_state_o`, `dec_ready_i`.

Both are valid/ready: a word moves in a cycle where both signals are high. The
timing is:

* A word accepted in cycle *t* appears at decode in cycle *t+1*.
* Straight-line code runs at one instruction per cycle.
* `start_i` costs two derivation cycles plus the entry patch. The first
  instruction reaches decode 5 cycles after `start_i`, with fetch ready
  throughout.
* `stall_o` is high while the stage waits for a patch or for a resolution.
* In the cycle of `start_i` or `irq_enter_i` the stage neither offers nor takes a
  word.
* With `scfp_en_i` low the stage is a combinational wire from fetch to decode,
  the plain four-stage pipeline.

The core must:

* Give exactly one `cf_resolve_i` per branch, jump or MRET after decode took it,
  and redirect its fetch when the instruction is taken.
* Raise `cf_target_patch_i` for a taken jump whose target has bit 1 set.
* Keep the interrupt rule above.

Assertions in the stage check the resolution and interrupt rules in simulation.

Keys and nonces are plain input ports (`key_i`, `nonce_i`). Storing them is up to
the chip.

## Verification

Each block has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line.

| testbench | what it checks |
|---|---|
| `tb_prince_core` | Published PRINCE test vectors, and 300 random blocks against an independent model (`tb/scfp_tb_pkg.sv`) and its inverse. |
| `tb_scfp_predecode` | Directed encodings, and 500 random words against an opcode-table model. |
| `tb_scfp_irq_state` | Pad masking, exit mask, CSR read and write, MRET. |
| `tb_scfp_decrypt_stage` | A stream with an entry patch, a taken protected branch with a second patch, and an MRET. Checks every plaintext and state tag, throughput, stalls, derivation strobes, save on interrupt, and bypass. |
| `tb_scfp_top` | End to end at the design's only size (the top has no parameters). See below. |

`tb_scfp_top` runs a small program encrypted in the testbench. The program has a
loop on BPNE, two JALP calls to one function, a JALRP return through a second
patch, an unprotected branch, and an interrupt handler. The testbench plays a
core with a PC, a branch-resolution delay, random fetch bubbles and decode
back-pressure. It includes untagged and tagged interrupts and a CSR context
switch. A tampered ciphertext word and a clobbered saved state must both turn
every following instruction into noise. It prints a count of each mechanism it
exercised.

To build one testbench with Verilator:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
      rtl/prince_pkg.sv rtl/scfp_pkg.sv tb/scfp_tb_pkg.sv tb/tb_scfp_top.sv \
      --top-module tb_scfp_top
    ./obj_dir/Vtb_scfp_top

The encryptor in `tb/scfp_tb_pkg.sv` and `tb/tb_scfp_top.sv` shows how a
toolchain has to build an image. It walks each straight-line block from its end
with PRINCE decryption, `{C_i, x_i} = f^-1({P_i, x_i'})`. It then solves each
patch as the XOR of the two states it must join.

## Departures and open points

* **Encodings, patch-word protocol, second-patch flag, entry patch and
  derivation layout** are choices of this design. The scheme only requires that
  they exist.
* **Instruction count.** The scheme is described as having seven new
  control-flow instructions, but eight are named. All eight are decoded here.
* **Wrong-path fetches.** The stage stalls after every control-flow instruction
  until it resolves. A core with branch prediction would instead need to buffer
  and roll back the state. That is not built.
* **Core, SoC and key storage** are not built. They are ports.
* **Not built:**
  * Feeding decoder signals back into the state (optional in the scheme).
  * Fast error recovery. With a 32-bit rate equal to the instruction width, no
    spare rate bits remain for it.
  * The larger Keccak-p[200] ("AEE", 168-bit capacity) and Keccak-p[50] ("IE")
    instances, which are alternatives to this PRINCE configuration.
* **Benchmarks.** The published code-size (about 20 %) and runtime (about 9 %)
  overheads depend on the compiler and on the core's branch timing, neither of
  which is here. No benchmark program is run.
* **Area.** The reference implementation has about 29 kGE of protection logic,
  mostly the unrolled PRINCE. This RTL has the same structure: one unrolled
  PRINCE, about 300 flip-flops of state and control, and S-box tables that
  synthesize to small ROMs.
