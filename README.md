# KeyVisor: CPU-enforced key handles in RTL

Software that encrypts with a key normally holds that key in memory, where a
memory-disclosure bug, a compromised process or a malicious OS can copy it.
KeyVisor moves the key out of reach. The CPU receives the key once and returns
a **key handle**, a 64-byte object that holds the key encrypted with a secret
**visor key**. The visor key lives in a register that only the extension can
read. From then on, software asks the CPU to encrypt or decrypt *with the
handle*. The CPU unwraps the handle internally, uses the key and never hands
it back.

Every handle also carries a **usage policy**, which the hardware checks on
each use:

- which privilege levels may use the handle;
- whether it may encrypt, decrypt or both;
- whether it is bound to one process (its `satp`) or one TEE (its PMP ID);
- how many uses remain before it expires.

Handles can also be revoked. A small on-chip table keeps the state that
cannot live inside the handle: validity, the usage counter and the binding
ID. This table is the **handle state cache (HSC)**.

This repository holds synthesizable SystemVerilog for the extension. It is
built as a coprocessor beside a RISC-V core, with a command/response port in
the style of RoCC, one port to the L1 data cache and one port to an external
AES-128-GCM engine. Self-checking testbenches cover each unit and the whole
extension.

## The instructions

Each instruction is one command: `funct7`, two 64-bit operands and the
destination register. It returns one 64-bit value for `rd`:

- bits [3:0] hold the result code;
- bits [63:8] hold a count, used only by revoke-by-ID.

| funct7 | instruction | rs1 | rs2 |
|---|---|---|---|
| 0 | `wrapkey` | address of a *handlegen* structure | where to write the 64-byte handle |
| 1 | `encrypt` | address of a handle | address of an *I/O structure* |
| 2 | `decrypt` | address of a handle | address of an I/O structure |
| 3 | `revoke` | address of a handle | – |
| 4 | `revoke by ID` | binding ID (process `satp` or PMP ID) | bit 0: 1 = PMP ID |

Each command also carries the caller's **context** (`kv_ctx_t`): privilege
level, `satp` and PMP ID. The core must supply these, because RoCC itself does
not carry them.

Instructions are blocking. A new command is accepted only after the previous
response has been taken.

Result codes (`kv_res_e`):

| code | name | meaning |
|---|---|---|
| 0 | `OK` | success |
| 1 | `AUTH_FAIL` | the handle was modified |
| 2 | `INVALID` | the handle is revoked, expired or unknown |
| 3 | `DENIED` | the policy forbids this caller or direction |
| 4 | `HSC_FULL` | no free HSC way for a new handle |
| 5 | `TAG_FAIL` | decrypted data failed authentication |
| 6 | `BAD_OP` | undefined `funct7` |
| 7 | `NO_KEY` | no visor key loaded yet |

## Memory structures

All structures are little-endian 64-bit words at 8-byte aligned addresses.

**Key handle** (64 bytes, written by `wrapkey`):

| bytes | content |
|---|---|
| 0–15 | usage policy (128 bits, stored in clear, authenticated) |
| 16–31 | IV_handle (96 bits, upper 32 bits zero) |
| 32–47 | AES-GCM tag |
| 48–63 | user key, encrypted with the visor key |

**handlegen** (input of `wrapkey`): words 0–1 policy, words 2–3 user key,
word 4 binding target ID, word 5 bits [7:0] usage counter.

**I/O structure** (input of `encrypt` and `decrypt`):

| word | content |
|---|---|
| 0 | data pointer |
| 1 | data length in bytes |
| 2 | AAD pointer |
| 3 | AAD length in bytes |
| 4–5 | IV_data (96 bits) |
| 6–7 | tag |

- **Encrypt** overwrites the data with ciphertext in place and fills in
  words 4–7 with the IV it chose and the tag.
- **Decrypt** reads the IV and tag from words 4–7, overwrites the data with
  plaintext in place, and reports `OK` or `TAG_FAIL`. It never writes a tag.

**Byte order toward AES-GCM.** Memory byte *i* of a 16-byte block becomes
bits [127−8i −: 8] of the GCM block. `bswap128` and `bswap96` in `kv_pkg` do
this conversion. Ciphertexts are therefore ordinary AES-GCM ciphertexts over
the bytes in memory.

## The usage policy

The policy is the first 128 bits of the handle. It is the AAD of the
handle's AES-GCM encryption, so changing any bit makes unwrapping fail with
`AUTH_FAIL`.

| bits | field | bits used |
|---|---|---|
| 5–7 | handle flags | 5 DKeyMode (reserved), 6 SelfBind, 7 PMPMode |
| 8–11 | privileges | 8 user, 9 supervisor, 11 machine (RISC-V level numbers) |
| 16–23 | algorithm | 16 AES-GCM (17, 18 reserved for other AEADs) |
| 24–31 | crypto attributes | 24 AllowEnc, 25 AllowDec |
| 32–39 | feature map | 32 lifetime (reserved), 33 Binding, 34 UsageCtr |

The field boundaries follow the published handle format. The position of
each flag inside its field is this design's reading of that format.

### Granting a use

A use is granted only if **all** of the following hold. They are evaluated
together in one cycle (`kv_pkg::pol_use_ok`):

1. the bit for the caller's privilege level is set;
2. the AES-GCM bit is set;
3. AllowEnc (for encrypt) or AllowDec (for decrypt) is set;
4. if Binding or SelfBind is set, the binding ID stored in the HSC equals the
   caller's ID:
   - the PMP ID when PMPMode is set;
   - otherwise the full `satp` value;
5. if UsageCtr is set, the counter in the HSC is not zero.

**Binding at creation.** With Binding, the ID stored at creation is the
target ID from handlegen. This is how the OS binds a handle to another
process. With SelfBind, the stored ID is the creator's own `satp` or PMP ID.

**Usage counter.** Each granted use decrements the counter. The use that
brings it to zero is still granted, and it revokes the handle.

### Revocation

Revocation clears the handle's bit in the allowlist. The handle is first
authenticated, so a forged handle cannot be used to revoke someone else's
entry. The caller may revoke if:

| the handle is | caller allowed |
|---|---|
| unbound | privilege level ≥ the lowest level the policy permits |
| bound to a process | that process, or privilege level > the lowest permitted level |
| bound to a TEE | that TEE (same PMP ID), or machine mode |

**Revoke by ID** revokes every live handle bound to the given ID.
- A PMP ID requires machine mode.
- A process ID requires supervisor or machine mode.
- It returns the number of revoked handles in `rd[63:8]`.

## Handle state cache

Each handle gets a unique 96-bit IV_handle, so the IV doubles as the
handle's name inside the CPU. The HSC is organised like a cache on that name:

- **Set index:** IV_handle[5:0], selecting one of 64 sets.
- **Tag:** the remaining 90 bits, IV_handle[95:6].
- **Ways:** 2 per set, so 128 entries.
- **Entry:** the 90-bit tag, a 64-bit binding ID and an 8-bit usage counter.
  The entries are held in a memory array with a registered read.
- **Allowlist:** validity is not stored in the entries. It sits in a
  separate 128-bit register, bit `way*64 + set`, so a revocation is one bit
  write.
- **Kind bits:** two per entry (bound, PMP), kept beside the allowlist. They
  let revoke-by-ID tell process bindings from TEE bindings.

**Lookup.** The IV is presented and, one cycle later, both ways of the set
are compared with the tag. The result is either a hit (way, state, kind) or
a miss. The lowest free way of the set is reported alongside.

**Creating a handle.** `wrapkey` takes the lowest free way of the set. If
both ways are taken, `wrapkey` fails with `HSC_FULL`; entries are never
evicted. IVs are spread pseudo-randomly over the sets, so a set fills up
well before all 128 entries are used. In the end-to-end test the first
overflow comes after 66 handles. Swapping HSC entries out to encrypted
memory would lift this limit, but it is not part of this design.

**Revoke-by-ID sweep.** The sweep walks the 64 sets, one set per clock, and
checks both ways in parallel. It takes SETS + 3 cycles.

## IV generation

One 96-bit LFSR supplies both IV_handle (for `wrapkey`) and IV_data (for
`encrypt`).

- **Feedback taps:** 96, 94, 49 and 47, a maximal-length set. The sequence
  repeats only after 2^96 − 1 IVs.
- **Use:** the current state is the IV handed out, and the register steps on
  the same clock edge.
- **Reset:** it starts from the `SEED` parameter. A product would seed it
  from a TRNG.

Encryption always draws IV_data from the LFSR. Users cannot supply an IV
for encryption, so a decrypt-only handle cannot be abused to create valid
ciphertexts, and IVs never repeat under one key.

## How an instruction flows

```
            command (funct7, rs1, rs2, rd, ctx)
                 |
          +------v-------+  visor key register
          |  steering    |--------------------+
          +--+--------+--+                    |
             |        |                       |
   +---------v--+   +-v---------------+       |
   |  handle    |   | de-/encryption  |       |
   |  wrapper   |   | unit            |       |
   +-+--+--+--+-+   +--+----+----+----+       |
     |  |  |  |        |    |    |            |
     |  | HSC |        |    |    |            |
     |  |     +--------+----+ IV generator    |
     |  +------ AES-GCM mux ------------------+--> external AES-128-GCM
     +---------- memory unit -----------------+--> L1 data-cache port
```

### wrapkey

1. Read the six handlegen words.
2. Draw IV_handle.
3. Look up its set and claim a free way.
4. Encrypt the user key with AES-GCM. The key is the visor key and the AAD
   is the policy.
5. Write the HSC entry, holding the binding ID and counter.
6. Write the eight handle words.

### encrypt and decrypt

These run in two phases.

**Phase 1: the handle wrapper.**
1. Read the handle.
2. Decrypt the key field with the visor key and compare the tag. A mismatch
   ends the instruction with `AUTH_FAIL`.
3. Look up the HSC. A miss ends it with `INVALID`.
4. Check the policy in one cycle. A refusal ends it with `DENIED`.
5. Update or expire the counter.

**Phase 2: the de-/encryption unit**, started only if phase 1 succeeded.
1. Receive the user key.
2. The AES-GCM engine switches over to this unit.
3. Read the I/O structure.
4. Stream the AAD blocks, then the data blocks.
   - Each block is read as one or two 64-bit words.
   - Bytes past the length are zeroed on the way in.
   - Bytes past the length are masked off on the way back.
5. Write each result block back in place.
6. Store IV and tag (encrypt), or compare the tag (decrypt).

### revoke and revoke by ID

`revoke` authenticates the handle and finds its HSC entry. If the rules
above allow the caller, it clears the entry's allowlist bit. `revoke by ID`
starts the HSC sweep.

## Units and files

All RTL is in `rtl/`, one unit per file.

| file | unit |
|---|---|
| `kv_pkg.sv` | sizes, policy bit positions, enums, structs, the policy functions and byte-order helpers |
| `kv_mem_if.sv` | memory request/response interface used between the units |
| `kv_steering_unit.sv` | command decode, sequencing, visor key register, response |
| `kv_handle_wrapper.sv` | wrapkey, unwrap and verify, policy enforcement, counter, revocation |
| `kv_hsc.sv` | handle state cache, allowlist register, revoke-by-ID sweep |
| `kv_encdec_unit.sv` | data path of encrypt and decrypt |
| `kv_iv_gen.sv` | 96-bit LFSR |
| `kv_mem_unit.sv` | shares the one cache port between the two clients |
| `keyvisor_top.sv` | the extension; parameters `HSC_NWAYS = 2`, `HSC_NSETS = 64` |

### External interfaces of `keyvisor_top`

- **Command and response.** A valid/ready command with `funct7`, `rs1`,
  `rs2`, `rd` and the caller context. A valid/ready response with `rd` and
  its value.
- **Visor key.** `visor_key_load_i` with `visor_key_i`. The key can be
  loaded only while the extension is idle. Until it is loaded, every command
  answers `NO_KEY`.
- **Cache port.** 64-bit, 8-byte aligned, with a byte mask.
  - A request is taken when valid and ready are both high.
  - Every request, read or write, gets exactly one `resp_valid` pulse.
  - One request is outstanding at a time.
- **AES-GCM engine** (`gcm_req_t` out, `gcm_rsp_t` in).
  - A one-cycle `start` carries the key, the 96-bit IV, the direction and
    the AAD and data lengths in bytes.
  - AAD blocks, then data blocks, follow on `blk_valid`/`blk_ready`. Each
    block is zero-padded, byte 0 in the MSBs.
  - Each data block yields one `out_valid` pulse with its result.
  - After the last block, one `tag_valid` pulse carries the tag.
  - On decryption the engine computes the tag; comparing it is the
    extension's job.
- **Observation.** `hsc_valid_o` exposes the allowlist.

## Timing

These figures were simulated with:
- a memory that answers 2 cycles after accepting a request;
- an AES-GCM engine taking 11 cycles per block;
- no memory stalls.

| operation | this design | published prototype |
|---|---|---|
| `wrapkey` | 101 cycles | – |
| handle verification within encrypt | 75 cycles | 93 cycles of overhead |
| encrypt, 4 B data + 4 B AAD | 174 cycles | 188 |
| encrypt, 200 B data + 200 B AAD | 552 cycles | 421 |
| encrypt, 1500 B data + 13 B AAD (TLS record) | 2032 cycles | 1439 |

Small payloads match the prototype closely. For large payloads the
de-/encryption unit already overlaps memory traffic with the engine:

- while block *i* is inside AES-GCM, the unit writes back block *i − 1*;
- in the same window it fetches block *i + 1*;
- if a result arrives early, a capture register holds it.

Each data block still needs four 64-bit round trips (two reads, two
writes). Only one access is in flight at a time, and each takes 4 cycles
here. A block therefore costs about 21 cycles, against the prototype's
roughly 13. Closing that gap needs a memory port that accepts a new request
before the previous one has answered; the block loop itself would stay
as it is.

The policy check takes one cycle, as published. Policy flags do not change
the latency.

## Where this design departs from, or goes beyond, the published description

- **IV_data on encryption.** It always comes from the LFSR. One part of the
  published description lets users choose IV_data for handles that may also
  decrypt. The prototype description generates it for every encryption, and
  that is what is built.
- **Revoke by ID.** It is a fifth function code. How it is encoded is not
  published.
- **Failed decryption.** Decrypt writes the plaintext back before the tag
  verdict is known. A `TAG_FAIL` result means the caller must discard the
  buffer. Holding back unverified plaintext would need a second pass or a
  buffer of the whole message.
- **Memory port.** The cache port is a reduced valid/ready handshake, not
  Rocket's HellaCache interface. It supports only aligned 64-bit words, so
  all pointers must be 8-byte aligned.
- **Own choices.** The flag positions inside the policy fields, the layouts
  of handlegen and the I/O structure, the result codes and the `rd` format
  are all this design's own.
- **Kind bits.** The two kind bits per HSC entry are an addition. They let
  revoke-by-ID stay within the HSC.
- **Not included:**
  - the AES-128-GCM engine (external);
  - the host core and caches;
  - the TRNG;
  - the remote key provisioning service (software in a TEE);
  - the optional HSC swapping.

## Verification

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_kv_iv_gen` | every LFSR state against a bit-level recurrence; no repeats; hold when idle |
| `tb_kv_hsc` | a reference model of all 128 entries: hits, misses, free ways, full sets, tag compare, updates, revocation, both sweep kinds and the sweep's duration |
| `tb_kv_mem_unit` | two competing random clients with byte masks and stalls; routing; priority; one response per request |
| `tb_kv_steering_unit` | stubbed units with random results; decode, sequencing, no-key and bad-op cases, back-pressure |
| `tb_kv_handle_wrapper` | the unit with the real HSC and LFSR and the GCM model; handle bytes against an independent GCM computation; all denial paths; counter expiry; TEE revocation; HSC overflow predicted from the drawn IVs |
| `tb_kv_encdec_unit` | random and edge-case lengths, from empty up to 1500 B; ciphertext, tag and IV against a byte-level GCM reference; round trip; tag failure; no writes past the buffer |
| `tb_keyvisor_top` | the whole extension at default size; see below |
| `tb_kv_aes_gcm_model` | the behavioural GCM engine against FIPS-197 and the GCM specification's test vectors |

`tb_keyvisor_top` counts how often each mechanism happens and fails if any
count is zero. The mechanisms are:
- missing visor key;
- undefined op;
- wrapkey, encrypt, decrypt;
- tag failure, authentication failure;
- privilege, binding and direction denial;
- counter expiry;
- revoke and revoke-by-ID;
- HSC overflow;
- memory stalls;
- response back-pressure.

It also checks that IV_data never repeats, and it prints the timing table
above.

The testbenches rely on two behavioural models, which are not synthesizable:
- `kv_aes_gcm_model` computes real AES-128-GCM.
- `kv_mem_model` is a RAM with latency, random stalls and backdoor access.

To run a testbench with Verilator, for example the end-to-end one:

```
verilator --binary --timing --assert \
  rtl/kv_pkg.sv rtl/kv_mem_if.sv rtl/kv_iv_gen.sv rtl/kv_hsc.sv \
  rtl/kv_mem_unit.sv rtl/kv_handle_wrapper.sv rtl/kv_encdec_unit.sv \
  rtl/kv_steering_unit.sv rtl/keyvisor_top.sv \
  tb/kv_aes_gcm_model.sv tb/kv_mem_model.sv tb/tb_keyvisor_top.sv \
  --top-module tb_keyvisor_top -Mdir obj && ./obj/Vtb_keyvisor_top
```

The unit testbenches need only the files of the units they instantiate, plus
`kv_pkg.sv` and, where memory ports appear, `kv_mem_if.sv`. All of them
finish in seconds.
