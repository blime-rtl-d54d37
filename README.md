# BliMe: a processor that computes on client data it cannot leak

A client wants a remote server to compute on its secret data. It does not want to trust
the server's software or have to rewrite its own program in some special way. BliMe
solves this with a small hardware extension:

- Every piece of client data inside the processor carries a **blindedness tag**.
- The hardware **refuses** any step that would let tagged data shape something outside
  software can see. That covers the program counter, memory addresses, unblindable
  outputs, and when or whether a fault happens.

Client data enters the chip encrypted. A dedicated engine decrypts it and tags it in one
step (`blnd`). Results leave only by the reverse step (`rblnd`), which encrypts them
again under that client's key before clearing the tag. Between those two points the
server's software can compute on the data freely, including ordinary arithmetic, loads
and stores. What it cannot do is branch on the data, index memory with it, or send it
anywhere except back through the engine. So even malicious or buggy software cannot turn
the data into an observable effect.

This repository is a SystemVerilog implementation of that scheme. It consists of:

- a small in-order core that runs a compact model instruction set and enforces the tag
  policy on every instruction;
- a tagged L1 data cache, an L1 instruction cache that refuses to hold blinded words,
  and a tagged L2 cache;
- a memory controller that keeps the tags in a hidden region of main memory;
- the key store and ChaCha20 engine behind `blnd` and `rblnd`.

The default configuration uses 8-bit tags with one tag per 64-bit word. All units come
with self-checking testbenches. The top-level testbench runs an encrypted matrix
multiplication end to end.

## 1. Tags

A tag is `TAG_W` bits wide:

- Tag 0 means the value is public ("unblinded").
- Any other value is the identity of the client the data belongs to.

So 8-bit tags separate 255 clients, and 1-bit tags give the one-client variant. Tags live
in two kinds of place:

- **Registers.** Each of the 32 64-bit registers has one tag (`blinded_regfile`).
- **Memory.** Every *granule* of `GRAN_BYTES` bytes has a tag, in both the data cache and
  main memory. The default granule is 8 bytes, one tag per word. The variant
  `TAG_W = 1, GRAN_BYTES = 1` gives one bit per byte. Both variants use exactly 64 tag
  bits per 64-byte line, and the memory controller depends on that (see section 4).

The packages and buses carry a value and its tag together as `blinded_t {tag, val}`
(`blime_pkg`).

## 2. The policy: what propagates and what faults

Every instruction is checked. The checks look only at tags and at public values, never at
blinded ones, so whether an instruction faults cannot depend on secret data.

| Operation | Result tag | Faults when |
|---|---|---|
| ADD SUB MUL AND XOR SLT | the non-zero input tag, else 0 | the two inputs carry two *different* non-zero tags |
| BZ cond, target | (none) | the condition or the target register is blinded |
| LOAD / STORE | load: the tag of the granule read; store: the granule gets the register's tag | the base register is blinded; or a blinded value is stored at or above `UNBLINDABLE_BASE`, the peripheral region |
| byte STORE into an 8-byte granule | the granule takes the byte's tag if that tag is non-zero, else keeps its own | the byte's tag *a* and the granule's tag *b* are both non-zero and differ |
| word LOAD spanning granules of two clients (only when `GRAN_BYTES < 8`) | (none) | always |
| fetch | (none) | the instruction word is blinded: it is replaced by 0 and marked invalid |
| BLND / RBLND | see section 3 | address, length or counter register blinded; or the engine refuses |

Two exceptions make common compiler idioms work. Both return a *public* zero whatever the
input tags:

- `SUB r,r` and `XOR r,r`, with the same register on both sides.
- `MUL` or `AND` with a public zero operand.

If the second exception did not exist, masking a secret with a public 0 would produce a
"secret" 0. Code that clears registers this way would then be stuck holding blinded data.

A faulting instruction writes nothing, and the program counter is set to 0, where the
fault handler lives. The core also reports a cause code and the faulting PC (`fault_*`
outputs). Those extra outputs are this design's own debug aid: they depend only on
public state.

**Why this is enough.** Secret data can only reach the outside world through:

- control flow;
- addresses (including the cache and TLB state they leave behind);
- timing;
- an unblindable device;
- the fault signal itself.

All of these are covered:

- **Control flow** and **addresses** are covered by the BZ and LOAD/STORE rows.
- **Timing**: no unit's latency depends on an operand value. The multiplier is
  single-cycle, cache hit or miss depends only on the address, and the engine's latency
  depends only on the length.
- **Devices** are covered by the unblindable-region rule.
- **Faults** depend only on tags.

Two more filters close the side doors:

- `ifetch_filter` stops blinded data from being executed as code: a blinded word is
  zeroed and flagged invalid.
- `pte_filter` zeroes a blinded page-table entry before it reaches the TLB. Without it,
  a secret PTE could steer address translation.

This core has no page-table walker, so that filter's ports are simply brought out on the
top.

## 3. Getting data in and out: the encryption engine

`enc_engine` holds one session key (256-bit key plus 96-bit nonce) per client tag. The
tag doubles as the key-slot number. Slots are written only through the `key_wr_*` port,
which is the connection to the hardware security module that does the key exchange with
the client. Software never reads a key.

The key does not cross that port in the clear. The HSM and the engine share a sealing key
(`SEAL_KEY`, fixed when the system is built). For each delivery the HSM picks a fresh seal
nonce, computes ChaCha20 block 0 under the sealing key and that nonce, and sends the
352-bit key-and-nonce XOR the first 352 bits of that block. The engine accepts one sealed
key at a time (`key_wr_valid`/`key_wr_ready`). It waits until no command is running, then
runs the same block through its own ChaCha20 core (19 cycles) and writes the opened key
into the slot. A sealed key that is waiting delays the next command. A key sent unsealed
is opened into garbage, so anyone who can only watch or drive the port learns and sets
nothing useful. The sealing keystream never reaches the data path.

The model ISA has two instructions for the engine. Each works in place on a buffer of
`len` 64-bit words:

- `blnd  rd=ctr, rs1=addr, rs2=len, imm=tag` (import): it decrypts the buffer and tags
  every word with `tag`. It refuses if any input word is already blinded.
- `rblnd rd=ctr, rs1=addr, rs2=len, imm=tag` (export): it encrypts the buffer and clears
  the tags. It refuses if any word carries a tag other than 0 or `tag`. So data can leave
  only encrypted under the key of the client it came from.

Encryption and decryption are the same XOR with a ChaCha20 keystream:

- The buffer is processed in 64-byte blocks.
- Block *k* uses keystream block number `ctr + k`.
- Word *j* of a block is XORed with keystream bits `64j .. 64j+63`, i.e. bytes
  `8j .. 8j+7` in RFC 8439 order.

The client therefore encrypts its input with the standard ChaCha20 (RFC 8439) using its
session key and nonce, and decrypts the output the same way. Its counter values must not
be reused under one key, as usual for a stream cipher.

**The command sequence:**

1. If the key slot is empty or the tag is 0, the command faults before touching memory.
2. For each block:
   - the engine starts the keystream;
   - it reads the block's words through the data-cache port and checks their tags;
   - only if every word passes does it write all of them back, converted.
3. A refused block is left untouched, and the command ends with a fault. Earlier blocks
   stay converted.

The core is stalled for the whole command, so software never sees a half-converted
block.

`chacha20_core` is a fully pipelined ChaCha20 block function:

- **Latency:** a key, nonce and counter go in, and 19 cycles later the 512-bit keystream
  block comes out.
- **Structure:** 19 register stages each hold one round. Even rounds are column rounds
  and odd rounds diagonal rounds. The twentieth round and the final add of the input
  state are combinational on the output side.
- **Throughput:** one block per cycle.
- **Verification:** the testbench checks it against the RFC 8439 §2.3.2 vector and a
  software reference.

The engine itself uses only one block at a time. That is enough here because the core
is stalled anyway.

## 4. Tags in the memory hierarchy

```
core   --data--+--> L1D (tagged_dcache) --+
engine --data--+                          +--> line_arbiter --> L2 (tagged_l2) --> tag_mem_ctrl --> memory
core   --fetch---> L1I (tagged_icache) ---+
```

Tags travel with their data at every level above main memory. Only at the bottom are
they split off into a separate region of memory.

**L1 data cache (`tagged_dcache`)**

- 16 KiB, direct-mapped, write-back and write-allocate, with 64-byte lines.
- Every data word has its `WTAG_W` tag bits stored beside it.
- A hit answers in the same cycle as the request.
- A miss first writes back a dirty victim, then refills the line; data and tags always
  move together.
- The partial-write rule and the mixed-granule load rule (section 2) are enforced here,
  because only the cache knows a granule's current tag.
- Address tags, valid bits and dirty bits are ordinary public state. The hit/miss
  decision depends only on the address.

**L1 instruction cache (`tagged_icache`)**

- 16 KiB, direct-mapped, with 64-byte lines of sixteen instructions.
- It stores no tags. Instead it keeps one *valid-instruction* bit per instruction.
- On refill, the line arrives from the L2 with its tags. Each instruction passes through
  an `ifetch_filter`. If any granule under the instruction is blinded, the instruction
  is stored as zero with its valid bit clear.
- Fetching an invalid instruction makes the core fault. So blinded data can never be
  executed, and its bits never reach the decoder.
- A hit answers in the same cycle. A miss holds the fetch until the refill is written.
- There is no coherence with the L1D. Code written as data becomes visible to fetch
  only after the L1D has written it back.

**L2 cache (`tagged_l2`)**

- 256 KiB, direct-mapped, write-back, with 64-byte lines.
- Each line keeps its 64 tag bits beside its 512 data bits.
- Both ports move whole lines. The arrays are read one cycle after a request arrives,
  so a hit answers in the second cycle.
- Lines in the tag region are never cached; they are passed straight down. Otherwise
  software could write a tag-region address and read its own value back from the L2.

The L1D and the L1I share the L2 through `line_arbiter`. It grants one whole line
transfer at a time, and the data cache wins a tie.

**Memory controller (`tag_mem_ctrl`)**

Main memory has no tag bits. The controller therefore turns every line transfer into two
transfers:

1. eight data beats at the line's address;
2. `TAG_BEATS` beats in a tag region starting at `TAG_BASE`.

The tag region layout is simple: the 64 tag bits of data line *n* are the 64-bit word at
`TAG_BASE + 8n`. The default `TAG_BASE` of 7 GiB leaves 7 GiB of data addresses below
it, and the tag region then occupies 896 MiB.

`TAG_BEATS` selects between two bus behaviours:

- **`TAG_BEATS = 8` (default).** This models a bus that can only move 8 words at a
  time. The whole aligned 64-byte block holding the tag word is read or written, and
  seven of those beats are wasted. On writes their byte strobes are 0. Each miss
  therefore costs 16 bus beats instead of 8: the "1:1" tag-to-data ratio.
- **`TAG_BEATS = 1`.** Only the tag word moves: 9 beats per miss, the "1:8" ratio.

Software must never touch the tag region, or it could forge or read tags. So a line
request that falls inside the region is not sent to memory:

- a fill returns zeros with clear tags;
- a write-back is dropped;
- `tag_region_hit` pulses.

The bus protocol is one 64-bit beat per `mem_req_valid && mem_req_ready`, with one
in-order `mem_resp_valid` per beat (reads and writes alike). The controller issues beats
back to back and collects responses as they come.

## 5. The core and its instruction set

`blime_core` runs one instruction per cycle, except that data-cache misses and engine
commands stall it. This is the simplest machine the policy can be stated on. It does no
speculation and has no branch predictor, so no transient execution can touch blinded
data.

**Instruction word (32 bits):**

| Bits | Field |
|---|---|
| 31:28 | opcode |
| 27:23 | rd |
| 22:18 | rs1 |
| 17:13 | rs2 |
| 12:0 | imm |

| Op | Name | Meaning |
|---|---|---|
| 0 | ADD | rd = rs1 + rs2 |
| 1 | SUB | rd = rs1 − rs2 |
| 2 | MUL | rd = rs1 × rs2 (low 64 bits) |
| 3 | AND | rd = rs1 & rs2 |
| 4 | XOR | rd = rs1 ^ rs2 |
| 5 | LOAD | rd = mem[rs1 + sext(imm[11:0])]; imm[12] = 1 selects a zero-extended byte |
| 6 | STORE | mem[rs1 + sext(imm[11:0])] = rs2; imm[12] = 1 selects a byte |
| 7 | BZ | if rs1 == 0 then pc = rs2 else pc = pc + 1 |
| 8 | BLND | import, see section 3 (rd = counter, rs1 = address, rs2 = length, imm[7:0] = tag) |
| 9 | RBLND | export, same operands |
| A | LI | rd = sext(instr[22:0]), public |
| B | SLT | rd = 1 if rs1 < rs2 as signed numbers, else 0 |
| F | HALT | stop |

Other details:

- The PC counts instructions, not bytes.
- Instruction *pc* is fetched from byte address 4·*pc* of main memory, through the
  L1 instruction cache. The core waits in place while the cache refills (`imem_ready`
  low). The core's own fetch port also takes a tag per word: an instruction the cache
  marked invalid arrives with a non-zero tag, and the core's `ifetch_filter` faults on it.
- Loads and stores at or above `UNBLINDABLE_BASE` (0xFFFF_0000_0000_0000) go to the
  `periph_*` port instead of the cache.
- After reset the PC is 1, because address 0 is the fault handler.

The eight instructions ADD through BZ form the instruction set on which the policy is
defined. The rest are this design's additions:

- the encoding itself;
- LI, HALT and byte accesses;
- SLT, a compare that the FindMax example below needs (a RISC-V core has one);
- the engine opcodes.

## 6. Top level

`blime_top` connects:

- core → L1D and L1I → arbiter → L2 → tag-splitting memory controller → main-memory
  port;
- the engine, which borrows the data-cache port while `eng_active` is set;
- the PTE filter.

The following parts are outside the design, and their signals are top-level ports:

- main memory, which holds programs as well as data;
- the HSM key port (sealed keys);
- the peripheral window;
- the page-table walker/TLB pair.

**Status outputs.** Several outputs show what the memory system is doing:

- `dcache_miss`, `icache_miss`, `icache_zeroed` (a refill replaced blinded words),
  `l2_miss` and `l2_writeback`;
- `data_beat`, `tag_beat` and `tag_region_hit`;
- `retire`, `halted` and `fault_*`.

## 7. Simulating

Each unit has a testbench `tb/tb_<unit>.sv`. Every testbench:

- is self-checking;
- has a watchdog;
- ends by printing `TB_RESULT checks=N failures=M`.

Helpers in `tb/`:

- `main_mem_model.sv`: a behavioural DRAM with latency and random back-pressure;
- `chacha_ref_pkg.sv`: a ChaCha20 reference written independently of the RTL;
- `isa_asm_pkg.sv`: functions that assemble instruction words.

Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/blime_pkg.sv tb/chacha_ref_pkg.sv tb/isa_asm_pkg.sv \
    tb/tb_blime_top.sv --top-module tb_blime_top -o sim
./obj_dir/sim
```

List the packages first; `-y` lets Verilator find every module by its file name, so
the same line works for any `tb_<unit>`.

**`tb_blime_top`** runs the top with every parameter at its default: 16 KiB L1 caches,
256 KiB L2, `TAG_BEATS = 8` and 8-bit tags. It does the following:

1. It plays the HSM: it seals a key for client 5 and delivers it.
2. It stores two ChaCha20-encrypted 8×8 matrices in memory. It also loads the program
   there, since instructions are fetched from memory.
3. It runs a program that:
   - imports the matrices with `blnd`;
   - multiplies them with blinded arithmetic;
   - exports the product with `rblnd`;
   - copies the ciphertext words to the peripheral window.
   The product matrix lies 256 KiB above the first input, so the two also fight over
   L2 lines.
4. It decrypts what the peripheral received and compares it with its own product of
   the plaintext matrices.

Along the way it also checks:

- that a read of the tag region comes back empty;
- the `XOR r,r` public-zero rule;
- the PTE filter;
- a second program that tries to store blinded data to a peripheral and must fault;
- a third program that jumps into a line of memory tagged as blinded. It must fault
  with a blinded-instruction cause after the I-cache has zeroed the line;
- two "find the maximum" programs over the imported matrix A. The first uses the
  predicated, data-oblivious form: `p = max < a[i]; max = p*a[i] + (1-p)*max`. It must
  finish without a fault, holding the correct maximum with the client's tag. The second
  uses the form with an `if`. It must fault on its first compare-and-branch, because
  the branch condition is blinded.

It counts each of these events and fails if any of them never happened:

- L1D, L1I and L2 misses;
- L1D and L2 write-backs;
- tag beats, checking that every L2 line transfer moved exactly eight;
- imports and exports;
- faults;
- tag-region hits;
- zeroed instruction refills.

The whole run is about 14,000 cycles and simulates in well under a second.

## 8. How closely this follows the published design, and where it departs

**What follows the published BliMe design:**

- the tag semantics and the ALU/branch/load/store policy, including both public-zero
  exceptions;
- the fault-to-address-0 behaviour;
- the tag-granule partial-write rule;
- the unblindable region;
- zeroing blinded instructions and PTEs;
- tags beside every granule in the data cache;
- turning each miss into a data operation and a tag operation, with the 1:1 and 1:8
  ratios;
- an engine built around a pipelined ChaCha20 with 19-cycle latency, offering atomic
  decrypt-and-blind and encrypt-and-unblind;
- per-client keys installed by an HSM.

**What differs, and why:**

- **Core.** The published hardware adds BliMe to an out-of-order RISC-V core (BOOM).
  Here a single-cycle in-order core runs the eight-instruction model ISA on which the
  policy was formally verified. RISC-V binaries do not run. Speculation and
  variable-latency units do not exist, so the rules for them hold trivially.
- **Caches.** The published design places the data/tag split inside the L2. Here it is
  a separate controller below the L2 array. The caches are direct-mapped and blocking.
  They are connected by a simple arbiter rather than the host system's interconnect.
- **Tag region layout.** Tags are packed 64 bits per line. The published 8-bit-tag
  system instead reserved as much memory for tags as for data (14 GiB for 7 GiB
  usable). The bus traffic per miss is the same.
- **Key delivery.** The engine is not a RoCC accelerator. The core hands commands to it
  directly, and it reaches memory through the data-cache port. The secure channel to the
  HSM uses the shared sealing key that the published design names as the simplest
  option. Using ChaCha20 for the sealing, with a per-delivery nonce and no
  authentication tag, is this design's choice. A forged delivery therefore fills the
  slot with a useless key rather than being rejected. The HSM and the key exchange are
  outside the design.
- **blnd/rblnd direction.** One passage of the published description can be read as
  `blnd` encrypting. This design follows the import/export description: `blnd`
  decrypts into blinded form, and `rblnd` encrypts into public form.
- **Design choices of this implementation:**
  - the instruction encoding, LI/HALT and byte accesses;
  - the command format of `blnd`/`rblnd` (in place, counter operand, per-block
    atomicity);
  - the peripheral window;
  - the fault-cause outputs;
  - the cache organisation;
  - the memory bus protocol;
  - the pipeline split of ChaCha20.
- **Faults.** The published design raises one illegal-instruction fault for every
  violation. Here the handler address is the same, and a separate cause code is
  reported alongside.
- **Blindedness query.** The published design notes that an instruction reporting
  whether a value is blinded would be safe to offer. None is provided.
- **SLT.** The "find maximum" example needs a compare. SLT was added to the model ISA
  for it, under the same tag rule as the other ALU operations. The example's
  `(p*a) | (!p*max)` is written as an ADD, because one of the two terms is always zero.

**Trust.** Each unit is checked against values its testbench computes independently:

- the RFC 8439 vector for ChaCha20;
- a software tag model for the cache;
- a reference matrix product and a reference maximum for the full system.

Each testbench has also been run against a deliberately broken copy of its unit, and
every one of those copies was caught. The taint policy has only been tested, not formally
verified, at RTL level.
