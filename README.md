# PUF-keyed ECDH authentication core for constrained IoT devices

A small IoT device has to prove to a server that it is a genuine piece of
silicon and agree on a session key with it. It should do this without keeping
a secret key in non-volatile memory. This design gets the key from the chip
itself. The start-up pattern of an uninitialised SRAM block differs from
chip to chip and cannot be copied: it is a *physical unclonable function*
(PUF). A fuzzy extractor turns that noisy pattern into a stable 256-bit secret
`x`. Elliptic-curve Diffie-Hellman on Curve25519 (X25519) turns `x` into a
public key and, in the field, into a shared secret with the server.

The chip never stores `x`. At enrollment it draws a fresh random `x` and
publishes three values:
- its ID;
- *helper data* `HD`, which ties `x` to this chip's SRAM;
- its public key `PK_ID = x·G`.

A trusted third party signs these into a certificate. In the field the device
gets `HD` back together with the server's public key. It re-derives `x` from
a new, noisy SRAM read-out and computes `w = x·PK_server`. The server computes
the same `w` as `SK_server·PK_ID`. A counterfeit chip has a different SRAM. It
derives a different `x`, so its `w` does not match, and the key-confirmation
step that follows exposes it.

The RTL covers the device-side hardware of this scheme:
- a control unit;
- the PUF system: SRAM, random generator and fuzzy extractor;
- an X25519 scalar-multiplication unit;
- a small non-volatile memory that holds the third party's public key
  `PK_TTP` and the device's own certificate `Cert_ID`.

Everything is SystemVerilog-2017. Every block has a self-checking testbench.

## Protocol seen from the device

| stage | device receives | device does | device sends |
|---|---|---|---|
| I. enrollment (once, in a trusted environment) | `CMD_ENROLL` | draws `x` from the PRNG; `HD = R xor Encode(x)`; `PK_ID = X25519(x, 9)` | `ID`, `HD`, `PK_ID` |
| I. enrollment, continued | `CMD_STORE_PKTTP`, then the third party's public key `PK_TTP` | writes `PK_TTP` to NVM and write-protects it | – |
| I. enrollment, continued | `CMD_STORE_CERT`, then `Cert_ID = ID, HD, PK_ID, σ` | writes `Cert_ID` to NVM and write-protects it | – |
| II. key agreement (every session) | `CMD_AGREE`, then `HD` and `PK_server` | checks the server certificate (external verifier); rebuilds `x` from `HD` and the SRAM; `w = X25519(x, PK_server)` | `w` |
| II. session request, certificate on chip | `CMD_SEND_CERT` | reads `Cert_ID` from NVM | `Cert_ID` |
| II. key agreement, certificate on chip | `CMD_AGREE_CERT`, then `PK_server` | as `CMD_AGREE`, with `HD` read from the stored `Cert_ID` | `w` |

The protocol comes in four variants, A to D. They differ in who keeps the
device certificate and in whether the device authenticates the server. Each
maps onto a sequence of commands:

| variant | kept on the device | session commands |
|---|---|---|
| A: mutual authentication, certificates kept in a cloud | `PK_TTP` | `CMD_AGREE` |
| B: mutual authentication, no cloud | `PK_TTP`, `Cert_ID` | `CMD_SEND_CERT`, `CMD_AGREE_CERT` (verifies) |
| C: device authenticated only, cloud | nothing | `CMD_AGREE_NOVF` |
| D: device authenticated only, no cloud | `Cert_ID` | `CMD_SEND_CERT`, `CMD_AGREE_CERT` (does not verify) |

Under A and B the device checks the server's certificate, signed by the third
party, before it uses its key. Under C and D the server sends a fresh
ephemeral public key instead of a certificate, and the device checks nothing.
`CMD_AGREE_CERT` serves both B and D. It verifies exactly when a `PK_TTP` is
stored, since only B keeps one.

What happens after `w` is not built here: the key-derivation function, the
challenge-response key confirmation, and the signature check itself. The
device does keep the key the check needs, `PK_TTP`, in write-once non-volatile
memory, and hands it to the external verifier.
The protocol names these steps but does not fix their algorithms. The device
therefore returns the raw `w` on its output stream, and an outside party has
to apply the KDF. Connect the output to trusted logic only.

## Block structure

```
                 +----------------------------------------------+
 cmd / status ---|                control_unit                  |--- vf_req / vf_done / vf_ok
 in  stream  --->|  (command FSM, stream framing, SRAM arbiter)  |      (external certificate
 out stream  <---|                                              |       verifier)
                 +---+----------------+-----------------+-------+
                     |                |                 |
          +----------v----------------v--------+   +----v-------------+
          | PUF system                         |   | x25519_core      |
          |  sram_puf   (180 x 32 bit)          |   |  16 x 256-bit RF |
          |  prng       (xorshift128)           |   |  add/sub ALU     |
          |  fuzzy_extractor (code offset,     |   |  fp25519_mul     |
          |                   rep. code n=21)  |   |  ladder ucode    |
          +------------------------------------+   +------------------+
          +------------------------------------+
          | nvm (196 x 32 bit: PK_TTP, Cert_ID)|
          +------------------------------------+
```

| file | role |
|---|---|
| `rtl/device_top.sv` | top level: wires the blocks below |
| `rtl/control_unit.sv` | command sequencer, outside interface, SRAM access arbitration |
| `rtl/sram_puf.sv` | **behavioural model** of the uninitialised SRAM (not synthesizable) |
| `rtl/prng.sv` | random generator that supplies `x`, seeded by SRAM start-up noise |
| `rtl/fuzzy_extractor.sv` | code-offset fuzzy extractor with a repetition code |
| `rtl/x25519_core.sv` | X25519 scalar multiplication (Montgomery ladder + inversion) |
| `rtl/nvm.sv` | **behavioural model** of the non-volatile memory holding `PK_TTP` and `Cert_ID` |
| `rtl/fp25519_mul.sv` | digit-serial multiplier modulo 2^255-19 |
| `rtl/x25519_pkg.sv` | field constants, add/sub/freeze helpers, ladder microprogram |
| `rtl/device_pkg.sv` | sizes, command and status encodings |

## The PUF key path

### SRAM as a fingerprint

Each 6T SRAM cell is a pair of cross-coupled inverters. Mismatch between its
transistors makes most cells power up in the same state every time. A few
cells are nearly balanced and settle differently from one power-up to the next.

The model `sram_puf` reproduces both effects at word level:
- a cell's preferred value is a fixed integer hash of `DEVICE_SEED` and the
  cell's bit position, so another seed stands for another chip;
- on every `power_up` pulse, each cell independently takes the opposite value
  with probability `NOISE_PERMILLE/1000`. The default is 5%.

The block is 720 bytes, organised as 180 words of 32 bits. In silicon it
would be a standard SRAM macro with its power-up state left readable. The
model has that macro's plain read/write port plus the `power_up` event.

### Seeding the random generator

Enrollment needs a fresh secret. The control unit first reads all 180 SRAM
words and hands them to the `prng`, which absorbs each one: it XORs the word
into its newest state word and steps. The stable cells contribute nothing new
from one enrollment to the next. The unstable cells do, and this makes the
seed differ between power-ups. The generator then delivers 256 bits
(8 × 32), least significant word first.

The generator is xorshift128, chosen for its size. **It is not
cryptographically strong.** A production device should put a DRBG here, for
example one built on a hash or a block cipher, behind the same
absorb/generate interface.

### Code-offset fuzzy extractor

The codeword `C` is the 256-bit secret `S` (= `x`) with every bit repeated
`REP = 21` times: 5376 bits. The helper data is `HD = R xor C`, where `R` is the
SRAM start-up response over the same 5376 bits. The order is fixed:
- key bit `i` owns response bits `21·i … 21·i+20`;
- response bit `j` is bit `j mod 32` of SRAM word `j / 32`.

HD is therefore 168 words, or 672 bytes. The last 12 SRAM words are read only
for seeding.

For reconstruction the device reads a fresh, noisy response `R'` and forms
`C' = R' xor HD = C xor (R xor R')`. It then decides each group of 21 bits by
majority. A group decodes correctly while at most 10 of its 21 bits differ
between the enrollment read-out and the current one. The extractor counts
the bits it out-voted and reports the total as `n_corrected`
(`puf_n_corrected` at the top).

HD says nothing about `S` as long as `R` is uniformly random. It does not need
to be kept secret, which is why it may travel with the certificate.

How reliable is this? Take per-read cell noise `p`. Two read-outs then
disagree in a bit with probability `2p(1-p)`. The whole key fails to
reconstruct with probability:

| cell noise p | bit disagreement | key failure |
|---|---|---|
| 5% (model default) | 9.5% | 2·10⁻⁴ |
| 10% | 18% | 9% |
| 15% | 25.5% | 86% |

The repetition code is the simplest code that works. Real SRAM-PUF products use
concatenated codes and add an entropy-extraction (hash) step to tolerate more
noise and bias, and that is why their helper data is larger (752 bytes for 256
key bits in the figures this design was sized against). Neither that code nor
the hash step is reproduced here. `REP` is a parameter, but it must stay odd
and `256·REP` must fit in the SRAM.

Both operations handle one response bit per clock. That makes about
168 × 35 ≈ 5,900 cycles per enrollment or reconstruction.

## The X25519 unit

`x25519_core` computes `X25519(k, u)` exactly as RFC 7748 specifies it:
- the scalar is clamped;
- the top bit of `u` is ignored;
- the result is canonical.

`u = 9` gives a public key; a peer's public key gives the shared secret.
Operands are 256-bit integers, which are the RFC's 32-byte little-endian
strings read as numbers.

### Arithmetic

Field elements live in 256-bit registers in *partially reduced* form: any value
below 2^256 that is congruent to the element. Because `2^255 ≡ 19 (mod p)`,
every operation folds the bits above position 254 back in with weight 19:
- **add**: `a + b`, then one fold. One cycle.
- **subtract**: `a + 4p − b`, which stays positive for any inputs below 2^256,
  then one fold. One cycle.
- **multiply** (`fp25519_mul`): Horner's rule over 16-bit digits of `b`,
  most significant digit first. Each step computes
  `acc ← fold(acc·2^16 + a·digit)`, with a 256×16-bit product and a 273-bit
  sum. Sixteen steps make one product, plus two cycles of issue and
  write-back.
- **freeze**: one fold, then a conditional subtraction of `p`. Used only on the
  final result.

### Sequencing

Sixteen 256-bit registers hold:
- the ladder state `x1, x2, z2, x3, z3`;
- temporaries `A … T`;
- the constant `a24 = 121665`.

For each of the 255 scalar bits, from bit 254 down to bit 0, the core runs
two steps:
1. the constant-time conditional swap of `(x2,z2)` and `(x3,z3)`, using the
   current bit XORed with the previous one;
2. the 18-instruction ladder step `LADDER_UCODE`: 8 add/subtract and 10
   multiply instructions, which are the RFC formulas one operation per line.

After the last bit and the final swap, `z2` is inverted as `z2^(p−2)`. The
exponent is fixed, so plain left-to-right square-and-multiply takes 253
squarings and 250 multiplications. One last multiplication gives `x2/z2`.

The instruction sequence depends only on constants, never on the scalar, so
the latency is always **57,325 cycles**. At 1 MHz that is 57 ms.

The off-the-shelf core that this unit stands in for is a small
instruction-set processor. It needs about 3.5 million cycles with its
16-cycle multiplier. This unit trades some area (a 16-entry 256-bit register
file and a 256×16 multiplier) for a 60-fold shorter run time.
`MUL_DIGIT_W`/`DIGIT_W` sets the digit width. It must divide 256: 8 gives a
smaller multiplier and about twice the latency, 32 the opposite.

## Control unit and interface

The control unit accepts one command at a time on `cmd_valid/cmd_ready/cmd`.
`status` shows the outcome:
- `ST_BUSY` while a command runs;
- `ST_DONE` when it has finished;
- `ST_ERR_VERIFY` when the server certificate was rejected, or no `PK_TTP` is
  stored;
- `ST_ERR_LOCKED` when a second store of the same area was refused;
- `ST_ERR_EMPTY` when `CMD_SEND_CERT` or `CMD_AGREE_CERT` finds no stored
  `Cert_ID`.

`cmd` and `status` are 3 bits wide, and all seven command codes are in use.

Data moves as 32-bit words over valid/ready streams, with `in_*` and `out_*`
in the usual AXI-Stream style. Multi-word values are sent least significant
word first. `out_last` marks the last word of a response.

| command | input words | output words |
|---|---|---|
| `CMD_ENROLL` (1) | – | 2 (ID, upper 16 bits zero) + 168 (HD) + 8 (PK_ID) |
| `CMD_AGREE` (2) | 168 (HD) + 8 (PK_server) | 8 (w), or nothing and `ST_ERR_VERIFY` |
| `CMD_AGREE_NOVF` (3) | 168 (HD) + 8 (PK_server) | 8 (w) |
| `CMD_STORE_PKTTP` (4) | 8 (PK_TTP), or none and `ST_ERR_LOCKED` | – |
| `CMD_STORE_CERT` (5) | 186 (ID 2, HD 168, PK_ID 8, σ 8), or none and `ST_ERR_LOCKED` | – |
| `CMD_SEND_CERT` (6) | – | 186 (Cert_ID), or nothing and `ST_ERR_EMPTY` |
| `CMD_AGREE_CERT` (7) | 8 (PK_server) | 8 (w), or nothing and an error status |

### Non-volatile storage

The NVM has 196 32-bit words:

| words | contents |
|---|---|
| 0–7 | `PK_TTP` |
| 8 | lock for `PK_TTP` |
| 9–194 | `Cert_ID`: ID (2), HD (168), PK_ID (8), σ (8) |
| 195 | lock for `Cert_ID` |

The device can only check the server's certificate if the third party's
public key on the chip cannot be swapped for an attacker's. Both store
commands therefore work once. The unit first reads the area's lock word. If
it holds `0xA5A55A5A`, the unit refuses with `ST_ERR_LOCKED` and takes no
input. Otherwise it writes the data words and then the lock word. The lock
lives in the same non-volatile array, so it survives power cycles. In silicon
a one-time-programmable array gives the same guarantee physically.

The device does not interpret the certificate. It only reuses the `HD` inside
it. `CMD_AGREE_CERT` feeds those 168 words from the NVM to the fuzzy
extractor, two cycles per word. The server therefore sends only its public
key.

`CMD_AGREE` and `CMD_AGREE_CERT` read words 0–8 first and present the key on
`vf_pk_ttp`. If the `PK_TTP` lock word is missing, `CMD_AGREE` stops with
`ST_ERR_VERIFY` without asking the verifier. `CMD_AGREE_CERT` instead goes on
without verification, as Variant D.

### Certificate check

Under `CMD_AGREE`, and under `CMD_AGREE_CERT` with a `PK_TTP` stored, the
unit holds `vf_req` high and waits for a one-cycle
`vf_done`. If `vf_ok` is then low, it stops and reports `ST_ERR_VERIFY`. The
device reads no input words in that case. The certificate itself reaches the
verifier by whatever path the system provides. The protocol fixes a 256-bit
signature but not the scheme, so the verifier is left outside this RTL.

The control unit also arbitrates the SRAM. It reads the SRAM itself while
seeding the PRNG and hands it to the fuzzy extractor otherwise. It clears
`x` from its registers once the scalar multiplication has consumed it. The
fuzzy extractor likewise clears the enrolled secret.

`puf_power_up` exists only because the SRAM is a model: pulse it once after
reset, and again to simulate a power cycle.

### Timing (default parameters, measured)

| operation | cycles |
|---|---|
| X25519 scalar multiplication | 57,325 |
| enrollment, command to idle, no output stalls | 63,586 |
| key agreement, last input word to idle | 57,332 |
| HD reconstruction, while HD streams in | ≈ 6,000 |
| `CMD_AGREE_CERT`, last input word (`PK_server`) to idle | 57,332 |

## Departures and limits

- **Scalar-multiplication engine.** The design computes the same function as
  the off-the-shelf core it replaces: X25519 with a "16-cycle" multiplier
  setting. The engine is this design's own, so its cycle count differs by
  about 60×.
- **Error-correcting code.** A length-21 repetition code and 672 bytes of
  helper data replace a commercial extractor with 752 bytes of helper data.
  There is no entropy-extraction step.
- **Random generator.** A PRNG of its own choosing, seeded from SRAM noise.
  It is not cryptographically strong.
- **Control unit.** A hard-wired FSM rather than a micro-program.
- **Not included:**
  - signature verification (only the handshake port exists);
  - the KDF and the key-confirmation handshake.

  The NVM holds 6,208 data bits. With the 752-byte helper data of the
  original extractor, Variant B would need 6,832.
- **Optional blocks.** The optional symmetric-cipher, test and power-management
  units are not built.
- **Memory models.** `sram_puf` uses `$urandom`. It and `nvm` are simulation
  models. Replace them with the target process's SRAM and NVM/OTP macros.

## Verification

Each testbench checks its block against values it computes independently and
ends with a `TB_RESULT checks=… failures=…` line. The X25519 reference in
`tb/x25519_ref_pkg.sv` is the RFC 7748 pseudocode written with full-width `%`
arithmetic. The same package also holds a reference xorshift128.

| testbench | what it establishes |
|---|---|
| `tb_x25519_core` | RFC 7748 test vectors: §5.2, and both public keys and the shared secret of §6.1; constant latency |
| `tb_prng` | key equals the xorshift128 model after absorbing seed words; latency 9 cycles; seed sensitivity |
| `tb_fuzzy_extractor` | `HD = R xor Encode(S)` bit by bit; exact recovery with up to 10 errors per group and random input gaps; `n_corrected` equals the injected errors; 11 errors corrupt exactly one key bit |
| `tb_nvm` | erased initial state, write and read back, reads do not disturb |
| `tb_sram_puf` | noise rate, bias, distance between two power-ups and between two devices, plain read/write |
| `tb_control_unit` | full message layout of all commands against the reference models; PK_TTP and Cert_ID store, lock and refusal; Cert_ID read-back; Variant D and B agreement from the stored HD; rejection and empty-store paths; output back-pressure |
| `tb_device_top` | end to end: two enrollments, PK_TTP and Cert_ID store, refused overwrite, rejected certificate, verified and unverified agreement, Variant B session (certificate sent, agreement from the stored HD), Variant D agreement on a counterfeit holding a copied certificate; every mechanism counted |
| `tb_device_top_full` | all top parameters at their defaults: enrollment, then a Variant D session (certificate stored and sent, agreement from the stored HD), then a Variant A session (PK_TTP stored, verified agreement); w checked against the server, cycle counts |

Run any of them with plain Verilator 5 (each takes well under a second of
simulation):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/device_pkg.sv rtl/x25519_pkg.sv tb/x25519_ref_pkg.sv \
    tb/tb_device_top.sv --top-module tb_device_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The testbenches do not depend on the initial value of any variable. To
regenerate the end-to-end scenario with another chip, change `PUF_SEED` and
`NOISE_PERMILLE` of `device_top`.
