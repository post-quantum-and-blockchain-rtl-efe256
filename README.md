# An AES-256-CBC attestation kernel for trusted FPGA edge nodes

FPGAs at the edge of 5G and beyond-5G networks often run in places nobody
guards. Before a tenant's bitstream is loaded onto such a board, a remote
verifier wants proof of two things: the node's own attestation software and
hardware have not been tampered with, and the encrypted bitstream waiting on
the node is the one its owner supplied. The scheme this RTL belongs to answers
with signed, nonce-fresh attestation reports. It uses post-quantum signature
and key-encapsulation algorithms, and it logs every verdict on a permissioned
blockchain. The scheme is published as "Post-Quantum and
Blockchain-Based Attestation for Trusted FPGAs in B5G Networks" (Papalamprou
et al.). This RTL is an independent implementation of its hardware part.

Almost all of that scheme is software on the node's processor. One piece sits
in the FPGA fabric: a small **AES kernel** that holds a device key, K_FPGA,
built into the bitstream. The kernel encrypts the bitstream report with that
key in CBC mode. Only the verifier, which holds a copy of K_FPGA, can read the
report. A node whose fabric does not carry the kernel and its key cannot
produce a report that decrypts correctly. This repository is that kernel,
with its processor-facing AXI4-Lite port.

## Where the kernel sits in the protocol

The attestation runs in five phases. Only one step of them touches this RTL.

| Phase | What happens | Where |
|---|---|---|
| I, offline | Application owner encrypts its bitstream with K_btstr; the verifier receives reference values, the node's signature public key and K_FPGA | off-line |
| II | Verifier sends nonce N1; node reports A1 = N1 ‖ SHA3-512(attestation software) ‖ SHA3-512(AES kernel bitstream), signed | processor software |
| III | Verifier sends nonce N2; node forms **A2 = N2 ‖ C3**, where C3 = SHA3-512(encrypted user bitstream), **encrypts A2 with AES-256-CBC under K_FPGA in the fabric**, signs the result and returns it | **this kernel** for the encryption, software for hash and signature |
| IV | A shared secret K_ss from a KEM protects the transfer of K_btstr; the node decrypts and loads the user bitstream | processor software and vendor configuration tools |
| V | Verifier signs a result report A3 and stores it on the blockchain | off-node |

In phase III the report is 128 + 512 = 640 bits when the nonce is 128 bits,
which is five AES blocks. The nonce size is this design's assumption; the
scheme does not fix it. The signature algorithms (ECDSA, Falcon-1024,
Dilithium-5), the KEMs (ECDH, Kyber-1024, McEliece-348864) and SHA3-512 are
software libraries, so none of them is here. The kernel's work is the same
whichever of those algorithms is chosen.

## Using the kernel

### Register map

All registers are 32 bits wide, on an AXI4-Lite slave with 8-bit byte
addresses. A 128-bit block spans four consecutive words. Word 0 holds block
bits [127:96], which are bytes 0..3 in FIPS-197 order, most significant byte
first.

| Address | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0 START: encrypt PT now. Bit 1 FIRST: chain on IV, which starts a new message. Reads as 0. |
| 0x04 | STATUS | R | bit 0 BUSY. Bit 1 DONE: set when a block finishes, cleared by START. Bit 2 KEY_READY. Bits [31:16]: blocks finished since the last FIRST. |
| 0x10–0x1C | IV | R/W | initialisation vector |
| 0x20–0x2C | PT | R/W | next plaintext block |
| 0x30–0x3C | CT | R | most recent ciphertext block |

IV and PT honour WSTRB. A write to STATUS, to CT or to an unmapped address
gets SLVERR and changes nothing. So does a read of an unmapped address. The
key cannot be read from any register.

### Encrypting a message

A message is encrypted one block at a time:

1. Write IV.
2. Write PT with the first block, then write CTRL = 0x3 (START | FIRST).
3. Wait for DONE, either by polling STATUS or by relying on the hold-back
   described below. Then read CT.
4. For each further block, write PT and then CTRL = 0x1 (START alone). This
   block chains on the previous ciphertext.

Software pads the message to whole blocks. A2 needs no padding when the nonce
is a multiple of 128 bits.

### Hold-back of START

The kernel never drops a START. If CTRL is written while a block is being
encrypted, the write is simply not answered yet. The same happens before the
key schedule has finished after reset. The B response comes on the edge where
the engine takes the block. IV and PT, in contrast, may be rewritten at any
time, because the engine copies them on the START edge.

This allows a "streaming" driver:

1. Write START for block *i*.
2. While block *i* is running, write PT for block *i+1*.
3. Write START for block *i+1*. The response to this write is held back until
   block *i* has finished.
4. Read CT.

In step 4, CT still holds block *i*. It stays there until block *i+1* is done,
14 edges after that START was performed. A driver that cannot read four
words in that window should poll DONE and read CT before the next START.

## How it works inside

```
            AXI4-Lite                 aes_kernel
  PS  <-------------------->  register slave (CTRL/STATUS/IV/PT/CT)
                                     |  start, first, iv, pt     ^ ct, busy, done
                                     v                           |
                               aes_cbc_engine  -- chaining register, XOR, bypass
                                     |
                               aes256_cipher   -- 128-bit state, 1 round / clock
                                     |  rk_idx            ^ round key
                                     v                    |
                               aes256_key_expand -- 15 x 128-bit round-key file
                                     ^
                               K_FPGA (parameter, set when the bitstream is built)
```

**Key schedule (`aes256_key_expand`).** The key is fixed, so the schedule runs
once, right after reset, and stores all 15 round keys in registers. Round keys
0 and 1 are the two halves of K_FPGA. Each later round key *k* is computed in
one clock from keys *k−2* and *k−1*, four FIPS-197 key words at a time. For
even *k*, the last word of key *k−1* goes through RotWord, SubWord and the
round constant Rcon[k/2]. For odd *k*, it goes through SubWord alone. The
13 computations take 13 clocks, and KEY_READY comes 14 clock edges after reset
is released. These 1920 flip-flops are most of the kernel's storage; the price
buys a cipher that never waits for a key.

**Cipher (`aes256_cipher`).** The 128-bit state register does one complete
round per clock: SubBytes through a 256-entry S-box table for each of the
16 bytes, then ShiftRows, MixColumns and AddRoundKey. The initial key addition
happens on the edge that accepts the block. The fourteenth round skips
MixColumns. `done` therefore rises on the 14th edge after the one that
accepts the block, 15 cycles after START is presented. The cipher holds no
key; it asks the key store for round `rk_idx` through a combinational read.

**CBC chaining (`aes_cbc_engine`).** The engine XORs the plaintext with the IV
(FIRST) or with the last ciphertext, and keeps every finished ciphertext in a
chaining register. One case is subtle. A block may start in the same cycle as
its predecessor's `done`, which is exactly what the START hold-back produces.
In that cycle the chaining register still holds the older value, so the engine
takes the ciphertext straight from the cipher's output through a bypass mux.
Without the bypass, every held-back START would chain on the wrong block.

**Register slave (`aes_kernel`).** The AW and W channels each have a one-entry
holding register, so address and data may arrive in either order. A write is
performed once both are present and no B response is outstanding. A CTRL
write also waits until the engine is idle and the key is ready. Reads are
answered one cycle after AR, one at a time. Concurrent assertions in this file
state the AXI rules the slave must keep: B and R stay valid and unchanged
until taken. A third assertion states that the engine is never started while
busy or keyless.

### Timing summary

| Event | Clock edges |
|---|---|
| Reset release → KEY_READY | 14 |
| START performed (edge E) → cipher `done` | E + 14 |
| START performed (edge E) → STATUS.DONE set / readable by a read | E + 15 / E + 16 |
| Back-to-back block rate | 1 block / 15 edges |
| AXI write, not held back: both halves taken → B | 1 |
| AXI read: AR → R | 1 |

The scheme's published measurements are end-to-end seconds, dominated by
software and by about 3.8 s of FPGA configuration. Against that, the kernel's
75 cycles for a five-block report are negligible at any plausible clock.

## Parameters

| Name | Where | Default | Note |
|---|---|---|---|
| `K_FPGA` | `aes_kernel` | NIST SP 800-38A example key | Placeholder: each device's bitstream must carry its own key. |
| `NR`, `NUM_RK` | `aes_pkg` | 14, 15 | AES-256 |
| `AXIL_ADDR_W` | `aes_pkg` | 8 | register space |

## What follows the scheme and what is this design's own

Taken from the scheme:
- AES-256 in CBC mode.
- Encryption of the report in the FPGA fabric, under a key built into the
  device.
- AXI-family access from the processor.
- The report layout N2 ‖ C3, with C3 a 512-bit SHA3 digest.

This design's own choices:
- AXI4-Lite with the register map above.
- Block-at-a-time operation with the IV supplied by software.
- One round per clock.
- The stored round keys.
- The START hold-back, SLVERR for bad addresses, and the byte order of
  registers.
- Automatic key expansion after reset.
- The 128-bit nonce.

Not in the hardware:
- SHA3-512, the signatures and the KEM.
- Decryption of K_btstr and of the user bitstream.
- The PCI-E and MPSoC shells that carry AXI from the processor.
- The physical unclonable function the scheme mentions as an option.

The published resource figures (Alveo U280: 9 % LUT, 6 % FF, 12 % BRAM; ZCU104:
15 % LUT, 12 % FF, 17 % BRAM) include that shell logic, so they cannot be
compared with this kernel alone.

The kernel has no countermeasures against side-channel attacks. The scheme
leaves physical attacks out of its threat model.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The reference model `tb/aes_ref_pkg.sv` is
written independently of the RTL. It derives the S-box from its definition, as
the inverse in GF(2^8) followed by the affine map, rather than from a table. It
works on byte arrays and follows the FIPS-197 key expansion word by word.

| Testbench | What it shows |
|---|---|
| `tb_aes256_key_expand` | FIPS-197 A.3 round-key words; all 15 round keys of 21 keys against the model; load→ready latency |
| `tb_aes256_cipher` | FIPS-197 C.3; the four SP 800-38A ECB-AES256 vectors; 30 random key/block pairs; 15-cycle latency; one-cycle `done`; START ignored while busy; back-to-back blocks |
| `tb_aes_cbc_engine` | SP 800-38A CBC-AES256 (four blocks); random multi-block messages with and without gaps (the bypass path); FIRST; block count |
| `tb_aes_kernel` | End to end through AXI4-Lite at default parameters. Runs 100 attestation requests, each encrypting a five-block A2 = N2 ‖ C3 with a fresh IV, checked block by block. Alternates polling and streaming drivers. Exercises and counts: START held back for the key schedule and for a busy engine; PT rewritten while busy; FIRST and chained blocks; SLVERR on writes and reads; WSTRB; AW before W and W before AW; B and R held by the master. Checks DONE timing to the cycle from STATUS reads. |

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/aes_pkg.sv tb/aes_ref_pkg.sv tb/tb_aes_kernel.sv --top-module tb_aes_kernel
./obj_dir/Vtb_aes_kernel
```

Replace `tb_aes_kernel` with any other testbench name. Each finishes in well
under a second.

### How far it can be trusted

- The cipher and the CBC mode match the published NIST vectors and an
  independent model over random data.
- The key cannot be read over the bus, because no read path reaches the
  round-key file.
- The register interface is a design choice. It has been simulated against an
  AXI master model written for these tests, not against a vendor shell or on a
  board.
- It is written as synthesisable SystemVerilog, but it has not been
  implemented on an FPGA or timed. The full round in one clock is the critical
  path: 16 S-box lookups, MixColumns and two XOR levels.
