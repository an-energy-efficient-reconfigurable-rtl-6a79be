# A DTLS cryptographic engine for IoT nodes

An IoT sensor node that wants end-to-end security speaks DTLS (TLS over UDP). A DTLS connection has two phases:

- **Handshake.** Costly public-key work: elliptic-curve Diffie-Hellman and ECDSA on a prime curve. It also needs hashing of every handshake message, random numbers and key derivation.
- **Application data.** Cheap: every record is encrypted and authenticated with AES-128-GCM.

In software on a small processor, the handshake costs seconds and many millijoules. This design moves the cryptography into a dedicated **DTLS engine** next to a small processor. The processor starts work by writing into a 2 KB engine RAM, then sleeps with its clock gated until the engine's done interrupt wakes it.

The engine contains:

- **ECC:** a reconfigurable prime-field elliptic-curve unit for any short Weierstrass curve up to 256 bits. It computes k·P with an SPA-resistant comb method, using a 4 KB cache of pre-computed points.
- **AES-128-GCM:** a 128-bit-datapath AES-128 with a 4-stage-per-cycle GHASH multiplier. A record of m AAD blocks and n text blocks takes exactly 54 + 32(m+n) cycles.
- **SHA2-256:** one core, 65 cycles per 64-byte block, shared by:
  - the standalone hash command;
  - HMAC, the HMAC-DRBG random generator and HKDF key derivation;
  - a running **session hash**, which keeps the handshake transcript digest without storing the messages.
- **DTLS RAM:** 2 KB, whose 1.25 KB "micro stack" for secrets cannot be seen from the processor bus.
- **Packet support:** three 256-byte packet FIFOs and a 64-bit retransmission timer.

The top level, `dtls_soc`, joins the engine to the processor-side logic:

- a clock divider and clock gate for the engine;
- the processor sleep gate;
- an interrupt controller;
- a clock-domain crossing for the bus.

The processor's 16 KB instruction cache, the SD-card controller that refills it and the 64 KB data memory are also in the top level, on the processor clock. The processor itself, the peripherals and the handshake state machine are not included. Their connections are top-level ports; see *What is not here*.

## Block map

```
 processor bus ──► dtls_soc ─┬─ system registers (0x1000..)  clock_ctrl ── core_clk (sleep gate)
 wfi, irq, core_clk          │                                          └─ de_clk (divider + gate)
 if_* fetch ────────────────►├─ icache (core_clk) 16 KB, 4 ways, 512 B lines
 SD card pins sd_* ◄────────►│    └─ sd_controller  CMD17 block reads, 4-bit bus
 dm_* ──────────────────────►├─ data_mem (core_clk) 64 KB, byte write enables
                             ├─ irq_ctrl  ◄── engine done, timer, ext_irq[5:0]
                             └─ bus_cdc ──► dtls_engine (de_clk)
                                              ├─ dtls_ram   2 KB: config | accel config | micro stack
                                              ├─ aes_gcm ─── aes128_core (aes_sbox x20), ghash_mult
                                              ├─ ecc_ecsm ── mod_mult, mod_inv, comb_cache (4 KB)
                                              ├─ sha256_core  (one, shared by the three below)
                                              │    ├─ own SHA command
                                              │    ├─ hmac_drbg ── hmac_sha256
                                              │    ├─ hkdf ─────── hmac_sha256
                                              │    └─ session_hash
                                              ├─ byte_fifo x3  IN / DATA / OUT, 256 B each
                                              └─ retransmit_timer (64 bit)
```

Shared types are in `rtl/dtls_pkg.sv`. It holds the SHA constants, the SHA request and response structs, the ECC and engine command codes, and the RAM region boundaries.

## Driving the engine

All engine access goes through the memory-mapped bus of `dtls_soc`. A bus master holds `bus_valid` until `bus_ready` pulses.

### Address map

The engine occupies byte addresses `0x0000–0x0FFF`:

| address | function |
|---|---|
| 0x000–0x7FF | DTLS RAM, word = addr[10:2]. Words 0–114: config (keys, certificate data, DRBG seed). Words 115–191: accelerator operands. Words 192–511: micro stack, which reads as 0 and ignores writes on this port. |
| 0x800 | CMD: write a command code to start it; ignored while busy |
| 0x804 | STATUS: [0] busy, [1] done (sticky; also the interrupt), [2] GCM tag ok, [3..6] GCM/ECC/DRBG/HKDF busy. A write clears done. |
| 0x808 / 0x80C | push a byte into the IN / DATA FIFO |
| 0x810 | pop a byte from the OUT FIFO |
| 0x814 | FIFO counts and full/empty flags |
| 0x818 / 0x81C | retransmission timeout (64 bits, in engine cycles) |
| 0x820 | timer control: [0] arm, [1] stop, [2] clear expired flag |
| 0x824 / 0x828 | timer count |

The system registers sit at `0x1000`:

| address | function |
|---|---|
| 0x1000 | engine clock divider: 0 = bus clock; n = bus clock / 2n |
| 0x1004 | engine clock enable |
| 0x1008 | interrupt enables |
| 0x100C | edge/level mode per interrupt |
| 0x1010 | pending interrupts; write 1 to clear |
| 0x1014 | wait for interrupt |

Interrupt 0 is engine done, 1 is timer expiry, and 2–7 are `ext_irq`.

### Command operands

A command copies its operands from the accelerator region into an internal buffer, runs, and writes its results back. Offsets below are words from word 115; 256-bit values are stored most-significant word first.

| command | code | operands | results |
|---|---|---|---|
| SHA | 1 | +0 byte length (≤ 272); message from +9, big-endian in each word | digest at +1..+8 |
| GCM | 2 | +0..3 key; +4..6 IV; +7 = {AAD bytes, text bytes}; +8..11 expected tag; +12 bit 0 = decrypt; AAD then text from +13, each padded to 16 bytes (≤ 16 blocks) | text replaced in place; tag at +8..11; +12 bit 1 = tag ok |
| ECC | 3 | +0..7 p; +8..15 a; +16..23 k; +24..31 x; +32..39 y; +40 = {ECC op [14:12], slot [11:9], bit length of p [8:0]} | x, y at +24..39 |
| DRBG_INST | 4 | seed from config words 100..107 | K and V kept in stack words 0..15 |
| DRBG_GEN | 5 | K and V from the stack | 256 random bits at +0..7; K and V updated in the stack |
| TSNAP | 6 | — | transcript digest so far at +0..7 |
| TPUSH | 7 | +0 = number of bytes to move from the IN FIFO into the transcript | bytes actually moved at +0 |
| TCLEAR | 8 | — | starts a new transcript |
| HKDF_EXT | 9 | +0..7 salt; +8..15 IKM | PRK at +0..7 |
| HKDF_EXP | 10 | +0..7 PRK; +8..15 previous block; +16 = {use previous [16], counter [15:8], info length [6:0] (≤ 64)}; info from +17 | output block at +0..7 |

The ECC ops are 0 (pre-compute a base point into a cache slot), 1 (k·P with the point in a slot), and 2–5 (field multiply, add, subtract and invert of x and y mod p).

The field operations exist so that software can do ECDSA arithmetic modulo the group order n by loading n as "p".

Loading and storing cost 2 engine cycles per word, plus about 5 bus cycles per bus access through the clock crossing.

## The ECC unit (`ecc_ecsm`)

This is the largest and least obvious part.

### Field units

- **`mod_mult`** multiplies MSB-first with interleaved reduction:
  - each cycle takes one bit of b, computes z = 2z + b_i·a, and brings z back below p with at most two conditional subtractions;
  - a product therefore takes t cycles, where t is the bit length of p (256 for P-256);
  - modular add and subtract take one cycle.
- **`mod_inv`** is a binary extended-Euclid inverter using only add, subtract and halving:
  - about 538 cycles on average for 256-bit operands;
  - this is cheap enough that inversion costs only a few multiplications.

### Coordinates and point formulas

Because inversion is cheap, points stay in **affine coordinates**. A micro-program in a small ROM sequences the field units over an 8-entry, 256-bit register file:

- **doubling:** 4 multiplications and 1 inversion;
- **addition:** 3 multiplications and 1 inversion.

### Comb scalar multiplication with ZSD* digits

The scalar is cut into four rows of d = ⌈t/4⌉ bits. A pre-computed table holds the eight points s3·P3 ± P2 ± P1 ± P0, where P_i = 2^(i·d)·P. One scan over the d columns then needs exactly one doubling and one table addition per column.

The sequence of operations is independent of the scalar, so simple power analysis cannot read the key bits. This depends on every digit being non-zero. Digits are ±1 (the *ZSD\** form), obtained without any conversion logic:

- the scalar is first made odd as k' = k + 1 + k0;
- digit j is +1 where bit j+1 of k' is 1, and −1 where it is 0;
- the top digit is +1.

A column whose top-row digit is −1 uses the negated table entry, which is a subtraction of y from p.

At the end, one more addition removes the offset: Q = k'P − P when k is even, or k'P − 2P when k is odd. Both cases cost the same.

### The comb cache

The 4 KB `comb_cache` holds 128 words of 256 bits.

- Each of the **six slots** takes 20 words: the eight table points, P and 2P.
- The last eight words are scratch space for the pre-computation.
- A base point that is used repeatedly, such as the curve generator, a server public key or a CA key, is pre-computed once. Each later k·P costs only the scan.

### Measured cost

For a 256-bit curve, simulated in `tb_ecc_ecsm` and the top-level test:

| step | cycles |
|---|---|
| pre-computation | 338,521 |
| k·P | 185,065 (64 doublings and 64 additions) |

Shorter primes run faster on the same 256-bit unit, because the multiplier loop and the number of comb columns both shrink with t. `tb_ecc_curves` runs the standard generators of NIST P-192 and SECG secp160r1:

| curve | pre-computation | k·P | original chip's k·P |
|---|---|---|---|
| P-192 | 197,347 | 104,403 | about 102k |
| secp160r1 | 140,998 | 72,605 | about 74k |

### Limits

The following are not handled:

- the point at infinity;
- the exceptional cases P = ±Q of the affine formulas.

These occur with negligible probability for random scalars on cryptographic curves.

## AES-128-GCM (`aes_gcm`, `aes128_core`, `ghash_mult`)

### AES-128

- `aes128_core` does one full round per cycle: 16 state S-boxes, plus 4 S-boxes for the on-the-fly key schedule.
- One block takes 11 cycles.
- Each S-box (`aes_sbox`) computes the GF(2^8) inverse as x^254 with a fixed chain of multiplications, followed by the affine map.

### GHASH

`ghash_mult` chains four bit-serial "h-stages" per cycle. One 128×128 GF(2^128) product takes 32 cycles.

### GCM schedule

The GCM sequencer overlaps the two units:

1. Compute H = E(K, 0): 11 cycles.
2. Encrypt the first counter: 11 cycles.
3. For each AAD or text block, 32 cycles of GHASH. During each text block, AES already produces the next key-stream block. During the last text block it produces E(K, J0) for the tag.
4. Hash the length block: 32 cycles.

The total is exactly 54 + 32(m+n) cycles, and `tb_aes_gcm` checks this for every case.

Only 96-bit IVs are supported, which is what DTLS uses. Decryption compares the computed tag with the supplied one.

## Hashing: one SHA core, three users

`sha256_core` takes message bytes one per cycle and generates the padding itself.

- A 64-byte block is compressed in 65 cycles: 64 rounds plus one cycle to add into H.
- Its intermediate state (H0..H7 and the byte count) can be read out and loaded back. This is what makes sharing cheap.
- Requests and responses travel as two structs (`sha_req_t`, `sha_rsp_t`), and the engine switches the core between users by command.

The three users are:

- **`hmac_sha256`** streams key⊕0x36, the message, then key⊕0x5C and the inner digest through the core. Keys are up to 32 bytes.
- **`hmac_drbg`** implements HMAC-DRBG Instantiate and Generate (NIST SP 800-90A):
  - the seed comes from the config memory;
  - K and V are parked in the micro stack between calls, so the random state never leaves the engine;
  - each Generate call returns 256 bits.
- **`hkdf`** performs the two HKDF steps, each as one HMAC:
  - Extract: PRK = HMAC(salt, IKM);
  - Expand: one 32-byte block T[k] = HMAC(PRK, T[k−1] ‖ info ‖ k), where info is up to 64 bytes;
  - longer outputs are made by calling Expand again with the previous block and k + 1;
  - the TLS 1.3 "Derive-Secret" step is an Expand whose info is the label structure (length 0x0020, "tls13 " label, transcript hash); the caller assembles that info.
- **`session_hash`** keeps the handshake transcript hash:
  - bytes collect in a 64-byte buffer, and each full buffer is compressed into the running state;
  - a snapshot restores the state into the core, feeds the buffered bytes, pads and finishes, leaving the running state untouched;
  - so the digest of "everything so far" can be taken at any point, while only 64 bytes of message are ever stored.

## Memory and protection (`dtls_ram`)

The 2 KB RAM is 512 words of 32 bits with two ports: one for the bus and one for the engine.

| region | words | size | contents |
|---|---|---|---|
| config | 0–114 | 460 B | keys, certificate data, DRBG seed |
| accelerator operands | 115–191 | 308 B | command inputs and outputs |
| micro stack | 192–511 | 1.25 KB | engine-only secrets |

The bus port sees the stack as zeros and cannot write it, so session keys and DRBG state are out of software's reach.

## Clocks, sleep and interrupts

**`clock_ctrl`**:

- The WFI register (or the `wfi` pin) sets a sleep flag that gates `core_clk` through a latch-based clock-gating cell (`clock_gate`).
- An interrupt clears the flag; a wake that arrives together with WFI wins.
- The engine clock is the bus clock divided by 2n (or undivided for n = 0) and has its own gate.

**`bus_cdc`** crosses each bus access into the engine clock with a toggle handshake, two flip-flops each way, so the divider can be set freely.

**`irq_ctrl`** has per-source enable, edge or level mode, and write-1-to-clear pending bits. Its output is both the processor interrupt and the wake-up.

## Instruction cache and SD card (`icache`, `sd_controller`)

Programs are too large for on-chip memory, so they live on an SD card. An SD card is read in 512-byte blocks with a long latency. The cache therefore uses 512-byte lines: 16 KB is 8 sets of 4 ways. Each line is refilled as 128 words from the SD controller (the `mem_*` port of the module). The refill starts with a one-cycle request carrying the line address; the words may arrive with gaps.

The cache is built for low energy per fetch, not for speed:

- **One word, one tag.** The data array reads one 32-bit word per cycle, and the tag array (32 × 21 bits, 84 bytes) reads one way's tag at a time.
- **Last-line register.** A fetch from the same line as the previous fetch reads no tag at all, and `rdy` comes one cycle after `req`. Straight-line code hits this case almost always.
- **MRU way predictor.** When the line changes, the ways of the set are probed one per cycle, starting with the most recently used one. That way is decoded from the set's 3 tree pseudo-LRU bits, so the predictor costs no storage. A hit in the predicted way takes 2 cycles, and each wrong guess adds one.
- **Replacement.** After four misses the tree pseudo-LRU victim is refilled. With a store that answers at once, a miss takes 136 cycles; through the SD card it takes about 1,100 SD clocks.

The fetch handshake allows one fetch per two cycles: the core holds `req` and `addr` until `rdy`. The cache runs on `core_clk`, so WFI stops it together with the processor.

**`sd_controller`** reads a block with the card's native 4-bit bus rather than SPI mode:

1. It sends READ_SINGLE_BLOCK (CMD17) on CMD: a 48-bit frame with CRC7. The argument is the block number (byte address / 512), as high-capacity (SDHC/SDXC) cards expect.
2. It checks the index and CRC7 of the R1 response.
3. It receives the data on DAT[3:0]: a start nibble, 1024 nibbles with the high nibble of each byte first, a CRC16 on each line, then an end nibble. The data may start while the response is still arriving.
4. It packs the bytes little-endian into words for the cache.

The SD clock is `clk / (2*(sd_cfg+1))`, set from the `sd_cfg` pins, and runs only during a transfer. CMD is driven after falling edges and both lines are sampled on rising edges. A bad response, a CRC16 mismatch or a timeout raises `sd_error`. A 512-byte block takes 1,099 SD clocks with the test card model. The card must already be initialised into 4-bit transfer mode: the initialisation commands are not implemented.

The 64 KB data memory (`data_mem`, ports `dm_*`) is a plain single-port RAM, also on `core_clk`. It holds 32-bit words with a write enable per byte, for RV32I byte and half-word stores. A read returns data one cycle after the access, and a write returns the word's old contents.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5, for example:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl rtl/dtls_pkg.sv \
          $(ls rtl/*.sv | grep -v dtls_pkg) tb/sd_card_model.sv tb/tb_dtls_soc.sv \
          --top-module tb_dtls_soc -o sim && obj_dir/sim
```

The package must come first on the command line. `tb_dtls_soc` and `tb_sd_controller` also need the card model `tb/sd_card_model.sv`.

Expected values in the testbenches come from independent models:

- published AES, GCM and P-256 vectors;
- a bit-serial GHASH written from the definition;
- reference SHA-256, HMAC and HMAC-DRBG digests;
- a Python elliptic-curve model for a 61-bit test curve (p = 2^61 − 1) and for P-256.

What the main testbenches cover:

- **`tb_dtls_soc`** runs the whole design at its default sizes, as software would:
  - P-256 key generation (pre-compute, then k·G) with the processor asleep during each command;
  - AES-GCM with the engine clock divided by 4;
  - clock gating;
  - DRBG, HKDF-Extract and transcript hashing;
  - FIFO overflow, the timer interrupt and an external interrupt;
  - an instruction-cache miss refilled from the card model through the SD controller, then a hit;
  - a word and a byte write to the data memory.

  It counts every mechanism and fails if one never happened. It runs in about 15 s.
- **`tb_icache`** checks the returned word and the exact latency of every fetch against a model of the tags, pseudo-LRU bits and last-line register, over 3000 random fetches with refill gaps.
- **`tb_sd_controller`** reads three blocks from `sd_card_model.sv`, a behavioural card. It checks the CMD17 frame and CRC7, all 128 words and the SD clock period for two divider settings, and that a corrupted CRC16 raises the error flag.
- **`tb_dtls_engine`** checks each engine command through the register interface.
- **`tb_ecc_curves`** runs k·G on P-192 and secp160r1 and checks each cost within 20% of the original chip's figures.
- The unit testbenches check the exact cycle counts: AES 11, GHASH 32, GCM 54 + 32(m+n), SHA 65 per block.

## Where this design departs from the source architecture

- **S-box.** The S-box is a straightforward GF(2^8) power circuit rather than the low-area composite-field (Canright) circuit. The function is the same; area and power differ.
- **Point formulas.** Affine doubling and addition use one more multiplication each than the 3M+I / 2M+I usually quoted.
- **Measured cost.** As a result, a 256-bit k·P takes about 185k cycles and pre-computation about 339k cycles, against roughly 180k and 320k for the original chip.
- **Inversion.** The inverter averages about 540 cycles against about 720.
- **Curve types.** Only short Weierstrass curves are supported; twisted Edwards curves are not.
- **Session hash storage.** The session-hash state stays in registers instead of being copied into the micro stack after every operation.
- **Clock gating.** The accelerators are not clock-gated individually while idle. Only the whole engine clock can be gated.
- **Engine interface.** The command codes, operand layouts, register addresses, clock-divider encoding, interrupt numbering and clock crossing are this design's own. The source describes the regions and the behaviour, not the encodings.
- **Retransmission timer.** The timer counts engine cycles and re-fires periodically. Backing off the timeout is left to whoever programs it.
- **GCM tag truncation.** Truncation of the GCM tag is left to the caller.
- **Instruction fetch rate.** The cache delivers one fetch per two cycles. The original core, at 0.96 DMIPS/MHz, must fetch nearly once per cycle, so its cache is pipelined in a way the source does not describe.
- **Bus reset.** The bus and engine domains share an asynchronous reset with no reset synchroniser on release.

## What is not here

- **Not built:**
  - the RV32I processor;
  - the SD card initialisation sequence (CMD0, CMD8, ACMD41, CMD2, CMD3, CMD7, ACMD6), so the card must be brought to 4-bit transfer state before the controller reads from it.

  The processor would connect to the bus, `if_*`, `wfi`, `irq` and `core_clk` ports of `dtls_soc`; the `dm_*` ports are its load/store port to the data memory.
- **Not specified in enough detail to build:**
  - the micro-coded handshake and record state machine;
  - the certificate parser;
  - the GPIO, UART and SPI peripherals.

  The state machine's side of the engine is available as the `sm_*` ports (IN and DATA FIFO read, OUT FIFO write, timer arm and expiry), in the engine clock domain. Peripheral interrupts enter on `ext_irq`.
- Without the state machine, a complete DTLS handshake cannot run on this RTL alone. Every cryptographic step of one can be run through the engine's commands, including the key schedule, as a sequence of HKDF commands issued by software.
- HKDF results, like all command results, go to the bus-visible accelerator region. Keeping session keys in the micro stack is a job for the missing state machine.
