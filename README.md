# A security layer for a tensor accelerator

A machine-learning accelerator on a PCIe card or in a cloud server trusts
everything around it: the host operating system, the driver that writes its
registers and the DRAM that holds its code, weights and activations. This
design removes that trust. It adds a thin hardware layer between an
unmodified accelerator core (the open-source VTA tensor core) and the outside
world, with three jobs:

* **Prove who it is and agree on a key.** A key pair is burned into the chip
  at manufacture. The layer signs with it to show it is genuine. Then it runs
  a Diffie-Hellman exchange with the user's program, which runs in a CPU
  enclave. Both sides end up with a 256-bit session key K that nothing else
  knows.
* **Keep DRAM contents secret and unmodified.** Code and data sit in DRAM as
  AES-256-GCM ciphertext, cut into fixed-size *pieces*. Each piece has its
  own nonce and authentication tag. When the core reads DRAM, the layer
  fetches the whole piece and recomputes its tag. Only if the tag matches
  does the layer decrypt the requested blocks and hand them to the core.
  Results the core writes are encrypted and tagged the same way.
* **Keep the registers honest.** The core is started by register writes over
  MMIO, and an untrusted driver makes those writes. The layer therefore holds
  them in shadow registers. It passes them to the core only after the host
  program has sent a MAC over the whole register state under K, together with
  a nonce it has never used before.

The core's datapath, instruction set and compiler are not changed. The
layer sits on the core's MMIO and DMA paths, so the core itself appears here
only as ports.

```
             +---------------------------- secured_vta --------------------------+
 core MMIO <-|  vta_reg_*   +----------- security_interface -----------+          |-> host MMIO
 core DMA  <-|  vta_req/rd/wr|  sec_ctrl (control logic)   sec_buffer  |-- dram_* |-> DRAM
             |              +-----|-------------|------------|----------+          |
             |                    | AES in/out  | GFM        | commands, bignums   |
             |              +-----v-------------v------------v----------+          |
             |              |  crypto_engine: aes256_pipe  gfm_mul  modexp          |
             |              |  trng_model  kdf_fold  key_storage        |  <- fuse_ek_*
             |              +-------------------------------------------+          |
             +-------------------------------------------------------------------+
```

## The piece: unit of encryption and of trust

DRAM is split into two areas, whose base addresses are part of the protected
register state:

* **Data area (`DATA_BASE`).** Ciphertext, in pieces of `PIECE_BLOCKS` 16-byte
  blocks. The default is 128 blocks, or 2 KB, which is exactly the on-chip
  buffer.
* **Metadata area (`META_BASE`).** One 32-byte record per piece, at
  `META_BASE + 32 * piece_index`. The record is `{nonce[95:0], 32'h0}` then
  `tag[127:0]`. That is 1.6 % extra memory at 2 KB pieces.

A piece is standard AES-256-GCM with no associated data:

| Quantity | Definition |
|---|---|
| hash key | H = AES_K(0^128) |
| keystream for block k | AES_K(nonce ‖ (k+2)), 32-bit big-endian counter |
| tag | GHASH_H(C_0 … C_{n-1}, [0]_64 ‖ [128n]_64) ⊕ AES_K(nonce ‖ 1) |

Any standard GCM library on the host therefore produces valid pieces.

Nonces written by the host must have bit 95 = 0. Nonces the accelerator
creates for its own writes are `{1'b1, 95-bit write counter}`. The two sources
can never reuse a nonce under the same key.

Pieces trade computation against memory traffic:
* Smaller pieces mean less hashing before the first block can be used.
* They also mean more metadata to fetch.

`PIECE_BLOCKS` is a parameter. It may not exceed the buffer (`BUF_BLOCKS`),
because a whole piece must be checked before any of it is released.

### Read path (`sec_ctrl`, states `R_*`)

For a core request `{addr, len}` in blocks:

1. Fetch the metadata record of the piece that holds `addr`.
2. Fetch the whole piece into the buffer. Each beat that arrives is fed to
   GHASH.
   * The GFM unit is not pipelined, so GHASH advances one block every 8 cycles.
   * The next block is prefetched from the buffer while a product is still in
     flight, so the GFM is never idle while data is waiting.
3. In parallel, AES encrypts the J0 block (nonce ‖ 1). The 29-cycle latency is
   hidden behind the hashing.
4. After the length block, compare GHASH ⊕ AES_K(J0) with the stored tag.
   * **Mismatch:** raise `integrity_err`, release no block of the request, and
     refuse every further core request until reset.
   * **Match:** issue counter blocks for only the requested blocks of the
     piece, one per cycle. Each AES result is XORed with the buffered
     ciphertext and sent to the core as it leaves the pipeline.
5. If the request continues into the next piece, repeat from step 1.

Cost per piece, once the data is in: about 8 × (PIECE_BLOCKS + 1) cycles of
hashing, plus the 29-cycle AES latency, before the first plaintext block
appears. After that, one block per cycle.

### Write path (states `W_*`)

A write must start on a piece boundary and cover whole pieces. A write that
does not is drained, dropped and flagged in `wr_err`: a partial write would
need a read-modify-write of the piece, which this design does not do.

For each piece:
1. The blocks are taken into the buffer.
2. A fresh accelerator nonce is drawn.
3. The piece is encrypted in place, one block per cycle.
4. The ciphertext is hashed.
5. The ciphertext is written to DRAM, followed by the metadata record.

### Register path (states `M_RV`, `M_COMMIT`)

The protected state is 12 words:

| Word(s) | Content |
|---|---|
| 0–7 | The core's registers. Register 0 is control; bit 0 starts the core. |
| 8 | `DATA_BASE` |
| 9 | `META_BASE` |
| 10–11 | Spare, zero |

1. The host writes any of these words through MMIO. They land only in shadow
   registers, and `regs_verified` drops.
2. The host writes a 96-bit nonce, then the MAC.
3. Writing the last MAC word snapshots the state and starts the check. The
   expected MAC is GMAC_K(nonce, state): GCM with the 12 words as three blocks
   of associated data and no ciphertext.
4. The state is accepted only if the MAC matches **and** the nonce is greater
   than the last accepted nonce.
5. On acceptance the snapshot is replayed into the core's register port,
   register 7 first and register 0 last, so the start bit is the final write.
   The new base addresses take effect at the same time.
6. On failure nothing reaches the core, `mac_fail` is set, and `replay_err` is
   also set if only the nonce was at fault.

## Trust establishment (`crypto_engine`)

The host drives the crypto engine through MMIO. It writes a command and polls
the engine's status. It moves 2048-bit numbers through a window of 64 words
per number (`A_BIGNUM + sel*0x100 + 4*i`, least-significant word first).
`sel` chooses MSG, P, G or RES.

| Command | What the engine does |
|---|---|
| `CE_SIGN` | RES = MSG^d mod n, using the burned-in endorsement key (n, d). The host checks it with the public key. |
| `CE_DH_GEN` | Draws a 2048-bit secret A from the TRNG, keeps it in key storage, and returns RES = G^A mod P. |
| `CE_DH_FINISH` | Treats MSG as the host's RSA-encrypted half. Decrypts it to g^B mod P, computes z = (g^B)^A mod P, derives K = KDF(z), writes K once into key storage, expands the AES key schedule and clears A. |

`CE_DH_FINISH` without a preceding `CE_DH_GEN` sets the error bit.

After `CE_DH_FINISH` the security interface recomputes H, and the session is
live.

All public-key work runs on one modular exponentiation engine:
* Products are bit-serial interleaved modular multiplications, one bit per
  clock, so one 2048-bit product takes 2048 cycles.
* Exponentiation is left-to-right square-and-multiply.
* One exponentiation with a 2048-bit exponent takes roughly 6 million cycles.
  The full key exchange takes about 25 million cycles, or 0.1 s at 250 MHz.
  This happens once per session.

### Departures from the paper's protocol

These are the points to weigh when judging how far the design can be trusted.

* **No separate attestation key.** The published protocol has the chip
  generate a fresh attestation key pair (AK) for every session, and sign
  AK_pub with the endorsement key. This design signs directly with the
  endorsement key, and the host encrypts its Diffie-Hellman half under the
  endorsement key. The attestation step still proves the chip is genuine.
  What is lost is the per-session unlinkability that AK gives.
* **The host supplies p and g.** The protocol has the chip generate the prime
  p and the primitive root g. Here the host writes them. The host must choose
  a safe group, because the hardware does not check p.
* **The KDF is a placeholder.** It is an XOR fold of the 2048-bit shared
  secret into 256 bits. The host must use the same fold. A real product
  should put a hash-based KDF (for example HKDF-SHA-256) behind the same
  start/done interface.
* **The TRNG is a stand-in.** `trng_model` is a free-running xorshift64
  generator with the interface of a TRNG macro. It keeps the design
  synthesizable and sizeable, but it has no entropy. It must be replaced by a
  certified noise source.
* **The endorsement-key fuses are outside the RTL.** The key pair comes in on
  the `fuse_ek_n` and `fuse_ek_d` ports.

## Blocks

| Module | Role | Timing |
|---|---|---|
| `secvta_pkg` | Shared types, register map and AES helper functions. The S-box is computed in a function (inverse as x^254, then the affine map), so there is no table file. | – |
| `aes256_pipe` | AES-256 encryption. The key schedule runs iteratively into 15 stored round keys. The cipher is a 29-stage pipeline: one input stage, then 14 rounds of two stages each. A tag travels with each block. | Key load 52 cycles. Then one block per cycle in, result 29 cycles later. |
| `gfm_mul` | GF(2^128) multiply in GCM bit order, 16 multiplier bits per clock, not pipelined. | `done` exactly 8 cycles after `start`. A new start is accepted in the `done` cycle. |
| `modexp` | base^exp mod N, W bits. | (1 + W + popcount(exp)) × W + W + 2 cycles |
| `kdf_fold` | K = XOR of the 256-bit chunks of the secret. | W/256 + 1 cycles |
| `key_storage` | Endorsement key pass-through, DH secret A (clearable), session key K (write-once per session). | – |
| `trng_model` | Random-word source (see above). | One word every RATE cycles while enabled |
| `crypto_engine` | Command sequencer over the units above. It owns the AES and GFM and lends them to the security interface. | – |
| `sec_buffer` | 2 KB piece buffer. One write port and two synchronous read ports: one feeds GHASH, the other the keystream XOR. | 1-cycle read |
| `sec_ctrl` | Control logic: the read, write and register paths above, plus MMIO decode. | – |
| `security_interface` | `sec_ctrl` plus `sec_buffer` | – |
| `secured_vta` | Top level | – |

### Handshakes

* **Requests.** Core to layer and layer to DRAM use valid/ready. A request is
  `mem_req_t {write, addr (bytes, 16-byte aligned), len (16-byte blocks)}`.
* **Read beats.** From DRAM and to the core they carry valid only, and must
  be taken when offered.
* **Core write beats.** These use valid/ready.
* **Host MMIO.** Single-cycle `host_valid` with `mmio_req_t {write, addr,
  wdata}`. Read data is combinational on `host_rdata`.

### Register map (host MMIO, byte offsets)

| Offset | Register |
|---|---|
| 0x000–0x02C | Protected register state, words 0–11 (shadow) |
| 0x100 | STATUS: bit 0 `regs_verified`, 1 hash key ready, 2 `mac_fail`, 3 `integrity_err`, 4 `replay_err`, 5 `wr_err`, 6 core done, 7 busy |
| 0x104–0x10C | Nonce, most-significant word first |
| 0x110–0x11C | MAC, most-significant word first. Writing 0x11C starts the check. |
| 0x200 | Crypto-engine command (`ce_cmd_e`) |
| 0x204 | Crypto-engine status: bit 0 busy, 1 session key valid, 2 AES key ready, 3 error |
| 0x1000 + sel·0x100 + 4i | Big-number window |

## What fits: the evaluated layers

The layer streams every tensor through the 2 KB buffer one piece at a time.
Capacity is therefore limited only by the 32-bit address space. Each DMA
request is at most 65,535 blocks (1 MB); longer transfers are split. The
paper's benchmark layers do not give their shapes. The shapes below are
assumed, AlexNet-like with 8-bit data, except ResNet-18's parameter count,
which is a commonly known figure. All of them fit.

| Layer | Bytes moved (weights) | 2 KB pieces | Metadata | GHASH cycles at 8 per block |
|---|---|---|---|---|
| Conv4 (3×3, 384→256) | 0.88 MB | 432 | 14 KB | ≈0.45 M |
| Conv5 (3×3, 256→256) | 0.59 MB | 288 | 9 KB | ≈0.30 M |
| FC1 (9216→4096) | 37.7 MB | 18,432 | 576 KB | ≈19.0 M |
| FC2 (4096→4096) | 16.8 MB | 8,192 | 256 KB | ≈8.5 M |
| ResNet-18 (≈11.7 M weights) | ≈11.7 MB | ≈5,700 | ≈180 KB | ≈5.9 M |

The fully connected layers read each weight once and do little arithmetic
per byte. Authentication at 8 cycles per 16-byte block therefore dominates
their run time: the ≈19 M GHASH cycles of FC1 are of the same order as the
≈24 M extra cycles reported for it. The obvious next step is a pipelined or
wider GF multiplier. `tb_workload_stream` measures the cost directly. At
full DRAM rate a 2 KB piece takes 1,200 cycles to read: 1,032 of GHASH,
128 to hand the blocks to the core, and the rest for the metadata fetch and
the J0 encryption. Writing a piece takes about 1,330 cycles. At that rate the
FC1 and FC2 weight volumes cost 22.1 M and 9.8 M cycles. The slowdowns
reported for those layers imply 23.9 M and 10.6 M extra cycles.

`gfm_mul`'s `CYCLES` parameter can be lowered, at the
cost of a wider combinational slice per clock.

## Verification

Each testbench checks its module against values worked out independently. All
of them print `TB_RESULT checks=N failures=M`, and all have a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_aes256_pipe` | FIPS-197 and zero-key vectors, random blocks against the reference model, back-to-back issue, and latency = 29 |
| `tb_gfm_mul` | The GHASH value of GCM test case 2, random products against a carry-less-multiply model, and exactly 8 cycles |
| `tb_modexp` (W = 64) | Random cases against wide-integer arithmetic, and the cycle formula |
| `tb_kdf_fold`, `tb_key_storage`, `tb_trng_model`, `tb_sec_buffer` | Block-level behaviour and timing |
| `tb_crypto_engine` (W = 256) | Signature verifies with the public key, error on out-of-order commands, full key exchange ending with AES under the derived key, and one GFM product |
| `tb_security_interface` (8-block pieces) | Register MAC accept, reject and replay, commit order, a read spanning three host-encrypted pieces, data held back until the tag is checked, written ciphertext and tags checked bit-exactly, round trip, misaligned write, tampered piece |
| `tb_workload_stream` | Interface at default size: streams 24 host-encrypted 2 KB weight pieces, then writes 4 result pieces. Checks every block and tag, and bounds the cycles per piece. |
| `tb_secured_vta` | The top at its default parameters (2 KB pieces, 2048-bit engine). It runs the whole session through the top's ports: attestation signature, key exchange, hash key, wrong and good register MAC, replay, a read across three 2 KB pieces, a one-piece write, a misaligned write and a tampered piece. Each of these ten mechanisms is counted, and one that never occurs is a failure. About 25 M cycles; under a minute with Verilator. |

`tb/gcm_ref_pkg.sv` is the host-side AES-256-GCM model the testbenches use.
It is written differently from the RTL, and `tb_aes256_pipe` and `tb_gfm_mul`
anchor it to published vectors.

Each testbench was also run against a deliberately broken copy of its module,
and each one failed. Examples of the breaks: a frozen round constant, a wrong
reduction polynomial, the replay check accepting an equal nonce, and the
buffer's second read port miswired.

To simulate, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_secured_vta \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/secvta_pkg.sv tb/gcm_ref_pkg.sv \
  tb/tb_secured_vta.sv
./obj_dir/Vtb_secured_vta
```

Replace the top module and file for the other testbenches.

## Limits and known differences

* **The core itself.** The VTA core and its MMIO and DMA shells are not
  included. The ports follow a generic valid/ready convention, not VTA's
  exact shell signals, so a thin adapter is needed.
* **No cycle-level reproduction of the benchmark table.** Without the core,
  the slowdown figures cannot be reproduced. The workload table above
  compares only the authentication cost.
* **No unprotected counter-mode configuration.** The paper profiles a
  counter-mode-only variant. It is a measurement baseline, not part of the
  design, and is not built.
* **Whole-piece reads.** A read of a few blocks still fetches and hashes the
  whole piece, because the tag covers the whole piece.
* **AES encryption only.** Only the forward cipher is built; GCM never needs
  the inverse.
* **Where GHASH's input comes from.** The block diagram draws the GFM next to
  the AES core. Here the control logic feeds both units and routes data
  between them.
* **Lint notes.** `rst_n` is both an asynchronous reset and a signal sampled
  by the protocol assertions, so lint reports it as used both ways. A few
  output bits are constant by construction; for example, a DRAM request
  length is always a whole piece or 2 blocks.
* **No binding of a piece to its place, and no rollback detection.** A
  piece's tag covers only its ciphertext and length, under the nonce stored
  with it. Someone who controls DRAM can therefore do two things without
  tripping the tag check:
  * swap two valid pieces, each together with its metadata record;
  * put back an older valid version of a piece, together with its old record.

  The protocol this design follows gives no mechanism for either case. Two
  natural extensions would close them: bind the piece address as GCM
  associated data, and keep per-piece version counters on chip or in an
  integrity tree.
