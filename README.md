# SECCS — secure context saving for intermittently powered devices

A device that runs from harvested energy loses power without warning. The usual
remedy is *context saving*: just before the supply collapses, the processor
copies its registers and working state into a non-volatile memory (NVM) and
copies them back when energy returns. That copy sits in an external memory
that an attacker can read or rewrite, and the attacker can choose when it is
made by pulling the supply down.

SECCS is a small hardware block placed between the processor and that NVM. On
the way out it encrypts every context word with a stream cipher and appends a
keyed signature (MAC) of the plaintext. On the way back it decrypts the words
and checks the signature, so that a changed word, a changed signature or a
changed key challenge is reported as tampering. Neither key is ever stored: both are
produced by a physical unclonable function (PUF) from random challenges, and
only the challenges are kept. Reading every memory in the system therefore
reveals neither the context nor the keys.

This RTL implements the architecture of the SECCS proposal by Valea, Da Silva,
Di Natale, Flottes, Dupuis and Rouzeyre (LIRMM). It uses the configuration
they costed: a SHA-256 based MAC, the Trivium stream cipher, a TRNG and an
arbiter PUF. The proposal describes the blocks and how data flows between
them. It does not describe a controller, interfaces, sizes or the MAC
construction. Those parts are this implementation's own and are listed in
[Departures and own choices](#departures-and-own-choices).

## The two phases

```
                      +---------------- seccs_top ----------------+
                      |            key_generator                  |
  trng_req/valid/data-+--> (TRNG) -> key NVM -> M1 -> arbiter PUF |
                      |         sc_key |            | mac_key     |
                      |                v            v             |
  cpu_wdata ----------+--+--> XOR <- trivium   mac_engine <- M1 <-+-- (cpu word,
                      |  |     |  (keystream)   (SHA-256)  |      |    decrypted word,
                      |  |     v                    |sig   |      |    raw NVM word)
                      |  |     M2 <-----------------+      |      |
                      |  |     +--------------------------------------> nvm_wdata
  cpu_rdata <---------+--+---- XOR <- keystream  <------------------- nvm_rdata
                      +-------------------------------------------+
```

**Context Storing Phase (CSP)**, started by `csp_start`:

1. The key generator asks the TRNG for one 64-bit challenge per key bit. It
   needs 208 bits: 80 for Trivium and 128 for the MAC. Each challenge is
   written into the key NVM at the address of its key bit. Through
   multiplexer M1 it also goes to the PUF, whose one-bit answer becomes that
   key bit.
2. Trivium is loaded with the 80-bit key and runs its 1152 warm-up steps.
   The MAC engine compresses its key block at the same time.
3. For each of the 32 context words: the word from the CPU is XORed with the
   next 32 keystream bits and written to target-NVM address *i* through
   multiplexer M2. The plaintext goes to the MAC through M1.
4. The MAC is padded and finished. The eight signature words are written
   through M2 to addresses 32…39. `done` pulses and the supply may now fail.

**Context Loading Phase (CLP)**, started by `clp_start` after power returns:

1. The key generator reads the 208 challenges back from the key NVM and sends
   them through M1 to the PUF. A PUF gives the same answer to the same
   challenge, so the same keys come back. The TRNG is not used.
2. Trivium and the MAC are restarted with those keys.
3. For each word: read it from the NVM, XOR it with the keystream, hand the
   plaintext to the CPU, and feed the plaintext to the MAC through M1.
4. The MAC is finished. The eight stored signature words are read. M1 now
   passes the raw NVM word, and the MAC engine compares each word with its
   own result. `integrity_ok` or `tamper` is set and `done` pulses.

The restored words reach the CPU *before* the check has finished, because the
signature covers all of them. Software must not jump into the restored
context until `done` has pulsed with `integrity_ok` set. On `tamper` it should
discard the context and cold-start.

A power cycle is modelled by `rst_n`. It clears every register, keys included.
The key NVM model and the external NVM have no reset and keep their content.

## Keys that are never stored

`key_generator` is the part that makes the scheme work, and the least
conventional. An arbiter PUF races two signal edges through a chain of 64
switch stages. Each challenge bit decides whether a stage swaps the two paths.
An arbiter at the end outputs one bit: which edge came first. The winner
depends on nanosecond-scale delay mismatches fixed at manufacture. So the same
challenge gives the same bit on one chip and an unrelated bit on another.

One chain gives one bit per challenge. A key of *k* bits therefore costs *k*
challenges. Key bit *n* (0 ≤ *n* < 208) is the response to the challenge
stored at key-NVM address *n*. Bits 0–79 form the Trivium key
(`sc_key[n]`); bits 80–207 form the MAC key (`mac_key[n-80]`). The key NVM
holds 208 × 64 bits, and each CSP overwrites it with fresh TRNG values. That
gives every saved context its own keys, so no keystream is ever used twice
even with Trivium's IV fixed at zero.

An attacker who rewrites one challenge changes one key bit, with roughly even
odds. The system testbench rewrites sixteen challenges and expects the MAC
check to fail.

The PUF cannot be written as logic. `arbiter_puf` is a behavioural model that
uses the standard additive delay model:

    delta = w[N] + Σ w[i]·φ[i],   φ[i] = Π_{j ≥ i} (1 − 2·c[j]),   response = delta > 0

The signed weights `w[i]` stand for one chip's stage mismatches. They are drawn
from a hash of the `DEVICE_SEED` parameter, so two seeds behave like two chips.
In the testbench the two chips disagree on about half of all challenges. The
model has **no noise**. A silicon arbiter PUF flips some responses from one
evaluation to the next, and a real key generator needs error correction or
helper data to rebuild exactly the same key. That is not part of this
design. On real silicon, a single flipped bit would make every CLP look like
tampering.

`key_nvm` is likewise a behavioural stand-in for a non-volatile macro: a
plain array with a one-clock read and no reset.

The TRNG is a bought-in IP block in the costed implementation and is not part
of this RTL. Its request/valid/data port is a port of `seccs_top`.

## Stream cipher

`trivium` follows the Trivium specification. The 288-bit state is loaded with
(K₁…K₈₀, 0…0), (IV₁…IV₈₀, 0,0,0,0) and (0…0, 1,1,1), then clocked
4 × 288 = 1152 times without output. The state update is unrolled `W` = 32
times, so one clock gives one keystream word. Warm-up therefore takes 36
clocks. `key[i-1]` is K_i and `IV[i-1]` is IV_i. The earliest keystream
bit is bit 0 of `ks_word`, and it is XORed with bit 0 of the context word. `W`
may be any divisor of 1152 up to 64.

The two XOR gates that encrypt and decrypt sit in `seccs_top`, as in the
architecture drawing. The same key serves for the CLP because it is rebuilt
from the same challenges. Keystream words are consumed in the same order in
both phases.

## Signature

`mac_engine` computes

    SIG = SHA-256( K_mac ‖ 0^(512−128) ‖ C₀ ‖ C₁ ‖ … ‖ C₃₁ )

K_mac fills the first bits of one whole 512-bit block, with `key[127]` hashed
first. Standard SHA-256 padding follows the context, whose length is counted
in bits and includes the key block. The context length is fixed and the key
has a block to itself, so the length-extension weakness of a plain
secret-prefix hash does not apply. The proposal only says the MAC "hashes the
data with a secret key". HMAC would be the textbook choice, at the cost of a
second pass.

The engine takes one 32-bit word per clock. After every 16th word it stops
accepting words (`msg_ready` low) for 67 clocks while `sha256_core` compresses
the block. These are the MAC stalls that the controller waits out. Padding is
written one word per clock. When the 0x80 marker lands in word 14 or 15 of a
block, a further block is added for the 64-bit length. The testbench covers
message lengths that hit each of these cases.

For the check, the eight stored words enter on the same `din` port with
`cmp_valid`. `match` rises only if all eight indices were compared and none
differed. Skipping a word cannot produce a pass.

`sha256_core` computes the FIPS 180-4 compression function. It has eight
working registers and a sliding window of 16 schedule words. It does one round
per clock and one final addition, so `done` comes 65 clocks after `start`.

## Interfaces and timing of `seccs_top`

| group | signals | protocol |
|---|---|---|
| control | `csp_start`, `clp_start` (in), `busy`, `done`, `phase`, `integrity_ok`, `tamper` (out) | one-clock start while `!busy`; `done` one-clock pulse; `integrity_ok`/`tamper` valid from `done` of a CLP until the next start |
| CPU → SECCS | `cpu_wvalid`, `cpu_wdata` (in), `cpu_wready` (out) | valid/ready, 32 words per CSP |
| SECCS → CPU | `cpu_rvalid`, `cpu_rdata` (out), `cpu_rready` (in) | valid/ready, 32 words per CLP |
| target NVM | `nvm_req`, `nvm_we`, `nvm_addr`, `nvm_wdata` (out), `nvm_ack`, `nvm_rdata` (in) | request and address held until a one-clock `nvm_ack`; read data valid with the ack; any latency |
| TRNG | `trng_req` (out), `trng_valid`, `trng_data[63:0]` (in) | request held until valid |

Target NVM layout: context word *i* at address *i*, signature word *j* at
`CTX_N + j`. The address is `$clog2(CTX_N+8)` bits wide.

Cost of one phase at the default size, in clocks: key generation about
3 × 208, plus the TRNG latency in a CSP; 36 for the cipher warm-up, overlapped
with the 67-clock key block of the MAC; at least 2 (CSP) or 3 (CLP) per word
plus NVM latency; 2 × 67 for the two full context blocks and 67 for the
padding block; then eight signature accesses. With NVM latencies of 1–4
clocks and a CPU that pauses at random, the system testbench measures about
1050 clocks per CSP and 1100 per CLP.

Parameters of `seccs_top`: `CTX_N` (context words, 32), `CHAL_BITS` (PUF
stages = challenge width, 64), `MAC_KEY_LEN` (128, a multiple of 32 up to
512), `DEVICE_SEED` (the simulated chip). The Trivium key is fixed at 80 bits.
Shared types and sizes are in `seccs_pkg`. SHA-256 constants are in
`sha256_pkg`.

Assertions in `seccs_top` check the NVM handshake: the request is held with a
stable address and direction until the ack, and there is never an ack without
a request. They also check that keys are loaded only when complete and that
keystream is consumed only when valid.

## Departures and own choices

Taken from the proposal: the block structure (key generator with TRNG, key
NVM, M1 and PUF; stream cipher with two XORs; MAC engine; multiplexers M1 and
M2), the two phases, keys regenerated from stored challenges, comparison of
signatures during loading, and the choice of SHA-256, Trivium, a TRNG and an
arbiter PUF.

Own choices, where the proposal is silent:

- The controller (state machine), every handshake, and the 32-bit word width.
- A 32-word context, a 64-stage PUF and a 128-bit MAC key.
- One PUF bit per challenge, which gives 208 stored challenges per session.
- The MAC construction (secret prefix in its own block) and the NVM address
  layout.
- A fixed zero IV for Trivium, and 32 keystream bits per clock.
- Three inputs for M1: CPU word, decrypted word and raw NVM word. The third
  input carries the stored signature to the comparator. The drawing shows
  three lines into M1 without saying what they carry.
- Restored words are released to the CPU before the check ends.
- A failed check only raises `tamper`. Nothing is erased or locked.

Not modelled: PUF noise and its error correction, the TRNG, the real NVM
macros, power and area. The costed area of the proposal (TRNG 15000 GE, PUF
516 GE, MAC 10763 GE, stream cipher 2016 GE) cannot be compared, because this
RTL has not been mapped to a cell library. Side-channel and fault-injection
hardening of the cipher and the MAC are also out of scope.

## How far it is checked

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M`. The reference models in `tb/tb_ref_pkg.sv`
are written separately from the RTL:

- **SHA-256:** the constants are recomputed from the cube and square roots
  of the primes. The compression uses the textbook 64-word schedule.
- **Trivium:** bit-serial, with the state indexed s₁…s₂₈₈.
- **MAC:** reference SHA-256 over the key block and the message.
- **PUF:** the additive model.

| testbench | what it establishes |
|---|---|
| `tb_sha256_core` | known digests of "abc" and of the 448-bit two-block message; 40 random blocks; 65-clock latency; package constants |
| `tb_trivium` | keystream of six keys (and a non-zero IV) against the bit-serial reference; 36-clock warm-up; hold while `next` is low |
| `tb_mac_engine` | signatures for lengths 0, 1, 13, 14, 15, 16, 32 and 45 words; match, one flipped word, one skipped word; stalls occur |
| `tb_key_generator` | challenges stored, keys equal to PUF responses, same keys after reset, no TRNG use in CLP, new keys per session, changed challenges change the key, CLP latency 3·208+1 |
| `tb_arbiter_puf` | reference responses, latency, reproducibility, about 50 % inter-chip difference, bias bounds |
| `tb_key_nvm`, `tb_data_mux` | storage, read timing and persistence; selection |
| `tb_seccs_top` | the whole module at default parameters. The NVM image is checked bit for bit against the references. Restore after a power cycle; tampered ciphertext, signature and key challenges are detected; a new session gives a new image. Each mechanism (both phases, both key sources, MAC stall, NVM wait, CPU back-pressure, power cycle, tamper, clean restore) is counted and must occur. |

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/seccs_pkg.sv rtl/sha256_pkg.sv tb/tb_ref_pkg.sv tb/tb_seccs_top.sv \
        --top-module tb_seccs_top --Mdir build
    ./build/Vtb_seccs_top

Replace `tb_seccs_top` with any other testbench name to run that testbench.
The system test runs in well under a second. `target_nvm_model` in `tb/` is
the external memory used by the system test. It adds a random wait of 0–3
clocks to every access.
