# Hardware Decryption Engine for PUF-keyed program packages

A program is compiled for one particular chip and shipped only in encrypted form. The key is
derived from a physical unclonable function (PUF) on that chip, so no other device can
decrypt the program, and a copy intercepted in transit shows nothing but ciphertext. The
compiler also hashes the plaintext program and ships the hash, encrypted with the same key,
as a signature. The chip recomputes the hash after decryption and lets the program run only
if the two agree. A package built for another chip, or changed on the way, fails the check.
So does an unprotected program from an unknown source. This works in both directions: the
chip runs only software made for it, and the software runs only on the chip it was made for.

This repository holds SystemVerilog RTL for the target side of that scheme, the
**Hardware Decryption Engine (HDE)**. It follows the ERIC framework (Bolat, Çelik, Olgun,
Ergin, Ottavi) and its FPGA prototype: a 32-bit key from 32 arbiter PUFs with 8-bit
challenges, an XOR cipher and SHA-256 signatures, placed next to a RISC-V Rocket core. The
compiler side (an LLVM-based encrypting compiler) is software and is not part of this RTL.
The testbenches model it where they need it.

## Structure

```
                 key_cfg                              key_regen
                    |                                     |
          +---------v----------+   puf_key   +------------v-----------+
          | key_management_unit|<------------| puf_key_generator      |
          |  pbk = mix(puf^cfg)|             |  32 x arbiter_puf (8b) |
          +----+----------+----+             +------------------------+
           pbk |          | pbk
               v          v
 pkg_* +--------------+  sig words (encrypted)  +-----------------+
 ----->|decryption_   |------------------------>| validation_unit |--> result_valid,
       |unit (XOR)    |                         |  decrypt + cmp  |    auth_pass/fail,
       +------+-------+                         +--------^--------+    exec_enable
              | plaintext words                          | digest
              +-------------> signature_generator -------+
              |               (SHA-256, sha256_core)
              v
        mem_we/mem_addr/mem_wdata  --> main memory (outside) --> processor (outside)
```

| File | Role |
| --- | --- |
| `rtl/eric_pkg.sv` | widths, the `enc_mode_e` type, SHA-256 constants, the key-mixing function |
| `rtl/arbiter_puf.sv` | behavioural model of one arbiter PUF (a delay race, not synthesizable logic) |
| `rtl/puf_key_generator.sv` | fires 32 PUFs and captures the 32-bit PUF key |
| `rtl/key_management_unit.sv` | turns the PUF key into the PUF-based key |
| `rtl/decryption_unit.sv` | streams the package, undoes the XOR cipher, splits program and signature |
| `rtl/sha256_core.sv` | SHA-256 compression, one round per clock |
| `rtl/signature_generator.sv` | SHA-256 over the decrypted program, with padding |
| `rtl/validation_unit.sv` | decrypts the shipped signature and compares |
| `rtl/eric_hde.sv` | top level, wires the above together |

## Keys: PUF key versus PUF-based key

The chip's identity is the **PUF key**. Each arbiter PUF sends a rising edge down two
nominally equal paths of eight switch stages. A challenge bit sets each stage to pass the
paths straight or to cross them. An arbiter flip-flop records which path won: it samples
the top path with the bottom path as its clock. Manufacturing variation decides the race,
so the answer is fixed for a given chip and challenge, but differs between chips.
`puf_key_generator` owns 32 such PUFs. After reset it lowers their shared enable, raises it
and waits `SETTLE_CYCLES`. Then it latches the 32 responses: bit *i* of the key comes from
PUF *i* with challenge byte *i*.

In simulation a chip is represented by `DEVICE_SEED`. Every multiplexer input in the model
gets a delay of 1000 ps plus a 0–63 ps offset hashed from the seed and the input's position.
The race is settled arithmetically at the enable edge. Two seeds behave like two chips: in
the testbench about a quarter of the challenges get different answers.

The PUF key itself is never used as a cipher key. `key_management_unit` passes it through a
key function together with a configuration word, `key_cfg`. The result is the
**PUF-based key** `pbk`, and the compiler side holds the same key. Changing `key_cfg` moves
the chip to a new key: packages made for the old key stop verifying. The PUF itself does not
change. The function is a 32-bit avalanche mix (MurmurHash3's finaliser) of
`puf_key ^ key_cfg`. The framework leaves the function open and names a secure hash only as
an example. This mix is a cheap stand-in. Replace `eric_pkg::kmu_mix` if a one-way function
is required.

The mix is invertible, so for any chip there is a configuration that gives any chosen key:
`key_cfg = puf_key ^ mix⁻¹(wanted)`. Several chips can then share one PUF-based key, and a
single compiled package runs on all of them. The testbench of the unit does this for four
chips. The flip side is that anyone who knows both `pbk` and `key_cfg` can recover the PUF
key. That is the case where a one-way function is needed.

## The program package

The engine has no package header. The loader states the mode, the target-bit mask, the
number of program words `N` and the memory base address with `load_start`. Then it streams
the package, one 32-bit word per handshake:

| Mode | Words, in order |
| --- | --- |
| `ENC_FULL` | `N` program words, then 8 signature words |
| `ENC_PARTIAL` | for each group of 32 program words, one **map word** and then the group (the last group may be shorter); then 8 signature words |
| `ENC_PARTIAL_RVC` | as `ENC_PARTIAL`, but groups of 16 program words, with one map bit per 16-bit parcel |

* A program word is `plain ^ (key & mask)` if it is encrypted, and `plain` if it is not.
  In full mode every word is encrypted. In partial mode bit *i* of a map word marks word *i*
  of its group as encrypted. This is the one bit per instruction that partial encryption
  costs.
* `mask` selects which instruction bits are encrypted. With all ones, whole words are
  encrypted. A mask such as `0x000f8f80` encrypts only register fields. The opcode can be
  left in the clear, so the binary does not look encrypted.
* The signature is SHA-256 over the **plaintext** program, taken as bytes in memory order.
  Each word is a little-endian RISC-V instruction word, so its bytes are swapped into the
  big-endian SHA-256 word. Map words are not hashed. Signature word *k* is `H_k ^ key`, with
  `H0` first. The mask never applies to the signature.
* So a package is 256 bits longer than the program in full mode. In partial mode it is
  longer by another 1 bit per 32-bit instruction word, or 1 bit per 16 bits in
  `ENC_PARTIAL_RVC` (below).

`ENC_PARTIAL_RVC` is for code that contains compressed (16-bit) RISC-V instructions. It
costs 1 bit per 16 bits, which matches the framework's figure for such code. In the map word,
bit 2*i* belongs to the low parcel of word *i* and bit 2*i*+1 to the high parcel.

The engine finds instruction boundaries itself. An instruction is 32 bits wide when the
low two bits of its first parcel, once decrypted, are `11`. The bit of the parcel where an
instruction starts decides for the whole instruction. The bit of the second half of a
32-bit instruction is ignored.

Key bits follow the parcel's position in the word: a low parcel uses key bits 15:0, a high
parcel 31:16. This holds even when a 32-bit instruction straddles two words. The program
part must be code only, because data between instructions would be parsed as
instructions.

## A load, step by step, and its timing

1. `key_ready` rises 5 clock edges after reset with the default `SETTLE_CYCLES = 2`. PUF
   firing takes 2 + `SETTLE_CYCLES` edges and the key register adds 1.
2. `load_start` is accepted when `key_ready` is high and `busy` is low. The accepted start
   clears the Signature Generator and the Validation Unit, and the Decryption Unit latches
   the key.
3. Each program word that the memory (`mem_ready`) and the Signature Generator both accept
   leaves on `mem_*` at address `load_base + 4*index`, and goes into SHA-256 in the same
   cycle. Map words are consumed in one cycle and go nowhere.
4. The Signature Generator holds one 16-word block buffer. A full buffer is compressed in 65
   cycles, and the stream stalls meanwhile. One block costs 16 + 1 + 65 + 1 = 83 cycles.
   Padding is added after the last word and may need one more block. Signature words are
   taken at one per cycle, even while the last block is being compressed.
5. The Validation Unit decrypts the eight signature words as they pass. When all eight are
   in and the digest is final, it compares them in one cycle. `result_valid` then rises
   with `auth_pass` or `auth_fail`. `exec_enable` equals `auth_pass`, and all of them hold
   until the next load.

With no stalls, a 32-word full package takes 2·83 + (15 + 1 + 65 + 1) + 1 = 249 cycles from
the accepted start to the verdict. A 32 KiB program takes 42,579 cycles, 1.7 ms at the
prototype's 25 MHz. The SHA-256 core sets the throughput, at about 5.2 cycles per word. A
second block buffer would roughly halve the load time.

The share of encrypted words does not change the load time, because the XOR costs
nothing. Partial mode adds only its map words, and those are mostly taken while the stream
waits for the hash anyway. A 64 KiB program verifies in 85,075 cycles fully encrypted and
in 85,076 cycles with 10 % or 50 % of its words encrypted. 64 KiB of compressed code with
half its instructions encrypted also takes 85,076 cycles. The prototype measured a larger
run-time overhead for full encryption than for partial encryption. That difference must come
from parts of its system that are not described, not from this engine.

Interfaces: `pkg_*` is valid/ready. `pkg_ready` depends combinationally on `mem_ready` and
on the Signature Generator's state. `mem_we` is a single-cycle write, qualified by
`mem_ready` inside the engine. `load_n_words` must be at least 1. The package source
must keep a word it has offered (`pkg_valid` high) valid and unchanged until `pkg_ready`
takes it. Assertions in `decryption_unit` check both rules in simulation.

## What "authorised" means here

Decrypted words go to memory **before** the verdict, and only execution is withheld:
`exec_enable` is meant to hold the processor, for example in reset, until the check
passes. This keeps the engine small: it never needs room for a whole program. The cost is
that a failed package leaves its decrypted words in memory. They are not erased, and the
system must not run them. A design that must not expose even those words needs a staging
buffer, or memory scrubbing on `auth_fail`.

Security notes: a repeating 32-bit XOR key is the prototype's cipher, chosen for
simplicity, not strength. Known plaintext reveals the key at once. The structure carries
over to a stronger cipher: replace the XOR in `decryption_unit` and `validation_unit`. The
PUF model has no noise. A real arbiter PUF flips some responses, and would need error
correction or helper data, which the framework does not describe.

## Parameters

| Parameter (module) | Default | Meaning |
| --- | --- | --- |
| `KEY_W` (`eric_pkg`) | 32 | key width, equal to the number of PUFs (prototype value) |
| `PUF_STAGES` (`eric_hde`) | 8 | stages per arbiter PUF, i.e. challenge bits (prototype value) |
| `PUF_CHALLENGES` | `{32{8'h5b}}` | challenge byte *i* for PUF *i* (own choice) |
| `DEVICE_SEED` | `32'h5eed_0001` | which simulated chip (simulation only) |
| `SETTLE_CYCLES` | 2 | cycles between enable and capture (own choice; at 25 MHz, 80 ns for a ~8 ns race) |
| `CNT_W` | 24 | program length counter: up to 16 M words per package (own choice) |
| `ADDR_W` | 32 | memory address width (own choice) |
| `MAP_GROUP`, `MAP_GROUP_RVC` (`eric_pkg`) | 32, 16 | program words per map word in the two partial modes (own choice) |

## Following the source design, and departing from it

Taken from the framework: the five units and how they connect; 32 arbiter PUFs with 8-bit
challenges making a 32-bit key; a configurable key-management step between the PUF key and
the working key; the XOR cipher; full, per-instruction and per-bit partial encryption, with
one extra bit per instruction (per 16 bits in compressed code); a 256-bit SHA-256 signature over the plaintext, shipped
encrypted; execution only on a match.

This design's own choices, where the framework is silent:
* the key-mix function;
* the firing sequence of the PUFs;
* the map-word layouts, with parcel bits for compressed code, and the mask input;
* control by ports instead of a package header;
* SHA-256 byte order;
* one round per clock with a single block buffer;
* the handshakes;
* writing memory before the verdict.

The framework describes signature decryption in two places that disagree. Once it is done
by the Decryption Unit, once by the Validation Unit. Here the Validation Unit does it, and
it receives the key for that purpose.

Not built: the processor, its caches and main memory, which come from the existing SoC; the
compiler and its user interface, which are software; selectors of more than one bit per
instruction for choosing among several encryptions, which the framework only mentions as a
possibility; time-, temperature- or location-dependent key functions, which are named
only as future work; clearing memory after a failed check.

## Size

The prototype's whole engine cost 917 LUTs and 761 flip-flops on the FPGA. Generic
synthesis of this RTL gives about 2,600 register bits. Most of them sit in the SHA-256 path:
the chaining value, the core's copy of it and the working variables (768 bits), the
16-word message-schedule window (512 bits) and the 16-word block buffer of the Signature
Generator (512 bits). The Validation Unit holds the 256-bit decrypted signature. The stream
already stalls while a block is compressed, so the block buffer could be folded into the
schedule window, saving 512 bits. That is not done here, to keep the SHA-256 core
self-contained. The PUFs, the key path and the XOR datapath are small next to these.

## Simulation

Every testbench in `tb/` is self-checking. It ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. Build one with Verilator 5, for example
the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/eric_pkg.sv tb/sha256_ref_pkg.sv rtl/arbiter_puf.sv rtl/puf_key_generator.sv \
  rtl/key_management_unit.sv rtl/decryption_unit.sv rtl/sha256_core.sv \
  rtl/signature_generator.sv rtl/validation_unit.sv rtl/eric_hde.sv tb/eric_hde_tb.sv \
  --top-module eric_hde_tb -o sim && ./obj_dir/sim
```

| Testbench | What it shows |
| --- | --- |
| `arbiter_puf_tb` | all 256 challenges against the delay model; repeatability; two chips differ |
| `puf_key_generator_tb` | key equals the model's responses; valid after 2 + `SETTLE_CYCLES` edges; regeneration gives the same key |
| `key_management_unit_tb` | 500 random keys and configurations against a reference of the function; four chips mapped to one shared key |
| `decryption_unit_tb` | full, partial, compressed-code and masked packages with random gaps and back-pressure; one word per cycle |
| `signature_generator_tb` | SHA-256("abcd"), then 1–100-word messages against an independent SHA-256; padding edge cases; 83-cycle blocks |
| `validation_unit_tb` | match, flipped digest bit and wrong key, with signature words in random order |
| `eric_hde_tb` | the whole engine at its default parameters (see below) |
| `eric_workload_tb` | a 64 KiB program loaded fully, 10 % and 50 % encrypted (the configurations of the prototype's benchmarks), plus 64 KiB of compressed code at 50 %; checks memory, verdict and load time |

`eric_hde_tb` acts as the software source. It computes the chip's PUF-based key from the
models, standing in for the enrolment the scheme assumes, and builds each package with an
independent SHA-256. It then checks the memory image and the verdict for these cases:
* full encryption;
* about 10 % and 50 % partial encryption;
* compressed code, with one flipped bit that may shift an instruction boundary;
* bit-field encryption;
* a bit flipped in the program, and one flipped in the signature;
* a package for another chip;
* an unprotected program;
* a key reconfiguration, with old packages failing and new ones passing;
* PUF regeneration;
* 24 packages of random size, mode (all three) and mask, every third with one bit flipped;
* a 32 KiB program.

It counts memory and hash stalls and fails if any of these mechanisms never occurs.
`tb/sha256_ref_pkg.sv` holds the reference models: a whole-message SHA-256, the key mix, and
the arbiter delay model restated.
