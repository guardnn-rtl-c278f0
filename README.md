# GuardNN: a trusted memory-protection and instruction front end for a DNN accelerator

A DNN accelerator that runs in someone else's data centre sees its
users' inputs, model weights, intermediate features and outputs. The host
CPU that schedules it, the operating system and anyone who can probe
DRAM may all be hostile. GuardNN makes the accelerator chip the only
thing a user has to trust. Every piece of user data that leaves the chip
is encrypted, and in an optional integrity mode it is also authenticated.
Data enters and leaves only through a few instructions that re-encrypt it
under a key shared with the remote user. The chip also signs a report of
what it ran, so the user can check that the result is genuine.

The usual costs of off-chip memory protection come from version numbers
(VNs) and the Merkle tree over them. A CPU keeps one VN per memory block
in DRAM and needs a tree to stop replay. A DNN's memory traffic is far
more regular than a CPU's. Every output feature map of a layer is written
the same number of times, in an order the scheduler already knows. So a
few on-chip counters can produce every VN, and none has to be stored
off chip. What is left is one MAC per 512-byte chunk, the unit in which
the accelerator moves data.

This RTL implements that trusted addition:

- AES-CTR encryption lanes for the memory path
- the MAC engine
- the counter-based VN generator
- the memory protection unit that puts these on the path to DRAM
- the instruction controller
- the attestation hash unit

The base accelerator (its processing-element array and on-chip buffer),
the public-key unit, the random-number source and DRAM are outside the
RTL and connect through ports.

## Data path and trust boundary

```
 untrusted host ──instr_*/status──►┌────────────── guardnn_top ──────────────┐
                                   │  guardnn_ctrl ──► vn_generator          │
 public-key unit ◄──pkc_*/hashes───│     │   │  ▲           │ VNs           │
 TRNG ─────────────trng_*─────────►│     │   │  │           ▼               │
                                   │     │   └─►mem_protect_unit──mem_*────┼──► DRAM
 base accelerator ◄─acc_start/done─│     │        ▲  (enc_engine, iv_engine)│
 (PE array, buffer) ◄──── a_* ─────┼─────┼────────┘ owner mux              │
                                   │     └──► attest_hash                  │
                                   └─────────────────────────────────────────┘
```

All memory traffic goes through `mem_protect_unit`. One client owns its
port at a time. The base accelerator owns it only while a Forward runs;
the controller owns it the rest of the time, for imports and exports.

The unit has three request kinds:

- **weight:** encrypted under the weight VN.
- **feature:** written under the current write VN and read under the
  read VN that the host supplies.
- **raw:** unprotected. It is honoured only for the controller. A raw
  request from the accelerator is quietly treated as a feature request,
  so even a faulty or malicious Forward can only write ciphertext. The
  controller uses raw accesses only to read the user's session-encrypted
  buffers and to write session-encrypted results.

Weight writes are also honoured only for the controller. SetWeight
advances CTR_W before it writes, so every weight write gets a fresh VN.
A weight write from the accelerator is encrypted as a feature write
instead. Without that rule, a Forward could encrypt new data under a
weight VN already in use, which would repeat AES-CTR counter values.
Weights updated during training are therefore written and read back as
features.

## How a VN is formed

The AES-CTR counter of a 128-bit block is `{VN[63:0], block address[63:0]}`.
The VN comes from three on-chip counters and a host-filled table:

| counter | width | changes |
|---|---|---|
| CTR_IN  | 31 | +1 on SetInput |
| CTR_F,W | 32 | cleared on SetInput, +1 after SetInput has written its input and after each Forward |
| CTR_W   | 63 | +1 on SetWeight |
| CTR_F,R | 32 per range | loaded by SetReadCTR for an address range (8 ranges) |

The counters form three VNs:

| use | VN |
|---|---|
| features written now | `{0, CTR_IN, CTR_F,W}` |
| weights | `{1, CTR_W}` |
| features read at address A | `{0, CTR_IN, CTR_F,R(A)}` |

The top bit keeps weight VNs and feature VNs apart. Gradients are written
like features; they sit at other addresses, so they may share the VN.

The host knows its schedule, so it can work out which CTR_F,W value each
buffer was written with. It tells the chip with SetReadCTR. The read
counter is not trusted:

- A wrong value only decrypts to garbage.
- In integrity mode, a wrong value also fails the MAC check.

No write can reuse a counter value under the same key. Every write VN
holds CTR_IN and CTR_F,W, and CTR_F,W moves on after every instruction
that writes features.

A counter about to wrap holds its value instead and raises `exhausted`.
From then on the controller refuses every instruction that would use
counters (status CTR_EXHAUST) until the next InitSession brings a new key.

Read-table lookup:

- The lowest-numbered valid range that contains the address wins.
- An address in no range reads with CTR_F,R = 0.

## Memory protection unit and its timing

A request moves one chunk of 32 blocks (512 B, the accelerator's transfer
unit). With LANES = 3 AES engines a chunk takes 11 beats of three blocks;
the last beat uses two lanes. Lane i of beat k is the block at
`addr + 3k + i`.

**Writes.** A write streams through the encryption lanes, which add 12
cycles of AES latency, into a 16-beat FIFO towards DRAM. The client is
given write credit only while the FIFO has room for everything already
in the AES pipeline. So the pipeline never has to stall, even when DRAM
pushes back.

**Reads.** A read hands out each beat as soon as it is decrypted: one
beat per cycle after DRAM returns it, plus 12 cycles.

**MACs (integrity mode).** Each chunk's MAC moves as one extra single-beat
access. It sits in lane 0 of block `MAC_BASE + addr/32`; `MAC_BASE`
defaults to block 2^32, so data must lie below 64 GiB. On a read the MAC
is recomputed and compared when the chunk ends. The result comes with
`done` as `done_err`. Data handed out before that point only reaches the
trusted on-chip buffer. The controller keeps a sticky `integrity_fail`
flag, and once it is set the chip refuses to sign.

**The MAC.** The MAC is an XOR-MAC under its own key K_MAC:

```
t_i = AES(K_MAC, C_i xor {VN, addr_i})
MAC = upper 64 bits of (t_0 xor ... xor t_31)
```

It covers the ciphertext, the address and the VN of every block. A block
moved elsewhere, a stale copy and a changed bit all fail the check.
`iv_engine` produces it 13 cycles after a chunk's last beat.

Each encryption lane and the MAC engine hold a fully pipelined AES-128
(`aes128_core`). It takes one block per cycle, has 12 pipeline stages and
expands its round keys combinationally. Its S-box is computed by a
package function, not stored as a table.

## Instructions

The host hands `instr_t` (see `guardnn_pkg`) to `instr_*` and gets one
`status_valid` pulse per instruction. Statuses are OK, NO_SESSION,
INTEGRITY, CTR_EXHAUST and BAD_OP. The instruction's fields are
`op, integrity, slot, src, dst, count, arg`. `src`, `dst` and `count` are
block addresses and a chunk count.

| op | effect |
|---|---|
| GetPK | public-key unit returns the public key and certificate |
| InitSession | key exchange gives K_Session; two TRNG words become K_MEnc and K_MAC; counters, read table, hashes, integrity flag and export count cleared; protection on; `integrity` picks the mode |
| SetWeight | CTR_W+1; each chunk of `src` (session ciphertext) is decrypted with K_Session under counter `{arg, block index}`, hashed, and written to `dst` as weights |
| SetInput | CTR_IN+1, CTR_F,W=0; import as above, as features; then CTR_F,W+1 |
| Forward | `arg` goes to the base accelerator (`acc_instr`), which owns the memory port until `acc_done`; then CTR_F,W+1 |
| SetReadCTR | table slot `slot` := range `src`..`dst`, counter `arg` |
| ExportOutput | each chunk of `src` is read through the protection, re-encrypted under K_Session with counter `{1, export count, block index}`, hashed, and written raw to `dst`; export count+1 |
| SignOutput | integrity mode only, refused after any integrity failure: the public-key unit signs the four hashes |

"Hashed" applies in integrity mode only. Every instruction except GetPK
and InitSession is refused (NO_SESSION) before a session exists. The
top bit of the export counter separates the two session counter spaces,
so the user's import nonces (`arg`) must keep bit 63 clear.

The controller is a hardwired state machine. Each import or export chunk
is read into a 32-block buffer and then written out. A chunk therefore
costs two bus transfers, two AES latencies and, in integrity mode,
8 × 68 cycles of hashing.

## Attestation hashes

`attest_hash` keeps four SHA-256 chains:

- executed instructions with their operands
- imported input plaintext
- imported weight plaintext
- exported output ciphertext

Each chain starts from the SHA-256 initial value. Every 512-bit message
block replaces the value with the compression of (value, block). An
instruction is one block: `instr_t`, zero-extended to 512 bits. A chunk is
eight blocks. Since every message is a whole number of blocks, no padding
is applied; a verifier recomputes the same chain. The compression runs
one round per cycle: four cycles to take a block's words, then 64 busy
cycles.

## Where this RTL departs from or adds to the source design

- The source design runs the instructions as firmware on a small
  microcontroller. Here they are a hardwired state machine, and the
  public-key operations (key exchange, certificate, signing) are left to
  an external unit behind the `pkc_*` handshake.
- These are this design's own choices:
  - the VN bit layout
  - the separate weight/feature bit
  - the 8-range read table and its no-match value
  - the counter-exhaustion rule
  - the XOR-MAC, the 64-bit MAC and its placement in DRAM
  - the session-encryption counter layout and the export counter
  - the use of SHA-256 without padding
  - the status codes and the bus protocols
- SetInput also increments CTR_F,W once its input is written. The source
  only describes CTR_F,W being cleared on SetInput and incremented after
  each Forward. Without the extra increment, the input and the first
  layer's output would share a VN.
- The output hash covers the exported ciphertext, so it binds exactly
  what the user receives.
- The source prototype uses three AES engines with a 12-cycle pipeline.
  Both are the defaults here. A TPU-sized configuration would need
  hundreds of lanes. `LANES` is a parameter, but only 3 was built and
  simulated.
- Not modelled: data preprocessing on the accelerator, side-channel
  properties of the base accelerator, and the key store and certificate
  contents.

## Simulation

Each block has a self-checking testbench in `tb/`. Every testbench ends
by printing `TB_RESULT checks=N failures=M` and has a watchdog.
Reference values come from an independent behavioural AES
(`tb/aes_ref_pkg.sv`, brute-force S-box inversion) and, in the end-to-end
test, a SHA-256 written in the testbench. Behavioural stand-ins:

- `tb/dram_model.sv`: sparse memory with random stalls and 8-cycle read
  latency
- `tb/acc_model.sv`: a "layer" that adds a feature chunk to a weight
  chunk and can also try a raw write

`tb/tb_guardnn_top.sv` runs the top at its default parameters through
two sessions. The first is confidentiality-only. The second has
integrity on, signs successfully, and then catches a tampered chunk. It
checks that DRAM holds exactly the expected ciphertext and that the
user can decrypt the output. It counts each mechanism and fails if any
never happened: DRAM back-pressure, a wrong read counter, a refused raw
write, a refused accelerator weight
write, a MAC failure, refused instructions, signing and accelerator
transfers. Counter exhaustion is exercised in
`tb/tb_vn_generator.sv` with a 3-bit CTR_IN.

`tb/tb_guardnn_workload.sv` runs network-shaped workloads at the default
parameters. It uses 8 layers, each shrunk to one weight chunk and one
feature chunk. The counter schedule depends on the number of layers, not
on their size. It runs inference over two inputs and exports each output.
It then signs the four hashes and compares them with a reference chain.
After that it runs one training step:

- a forward pass
- a backward pass, with gradients at their own addresses under feature
  VNs
- export of the input gradient
- a weight update through SetWeight, which advances CTR_W to 2
- a final check that replaying the old weights and their MAC is caught

Every layer output and gradient in DRAM is compared with the expected
ciphertext.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/guardnn_pkg.sv tb/aes_ref_pkg.sv rtl/aes128_core.sv rtl/enc_engine.sv \
  rtl/iv_engine.sv rtl/mem_protect_unit.sv rtl/vn_generator.sv \
  rtl/guardnn_ctrl.sv rtl/attest_hash.sv rtl/guardnn_top.sv \
  tb/dram_model.sv tb/acc_model.sv tb/tb_guardnn_top.sv --top-module tb_guardnn_top
./obj_dir/Vtb_guardnn_top
```

The block testbenches need only the package, the reference package and
the block with its submodules. The testbenches reset everything they
read, so they also pass with random initial state
(`+verilator+rand+reset+2`).
