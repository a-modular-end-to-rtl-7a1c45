# PPUF-keyed firmware update engine (Lightweight configuration)

An embedded device that wants new firmware must be sure of three things: that the
image comes from its vendor, that nobody on the way could read or alter it, and that
it is meant for this very chip and is not an old or foreign image. This design does
that without any secret stored in non-volatile memory. The device's identity is a
**public PUF** (a differential public physical unclonable function, dPPUF): a race
circuit whose gate delays were measured by the manufacturer and published as a
software model. Anyone can *simulate* the chip's response to a challenge, but
simulation is far slower than asking the silicon. That gap (the execution-simulation
gap) is the whole security argument: keys are hidden among a million candidates, and
only the owner of the physical PUF can search them before a deadline runs out.

The RTL here is the device side of the protocol in its smallest configuration:
dPPUF for identity, SIMON 64/128 for encryption, SHA-256 for hashing, clocked at
100 MHz and talking over a 115200-baud serial line. The server side (firmware
distribution server and model repository) is a behavioural model in the testbenches.

## The exchange

The host is two parties: the firmware distribution server (FDS), which has its own
dPPUF, and the public PUF model repository (PPMR), which holds the published models
of every chip. Both are played by one process on the far end of the serial line.

1. **Pick I1.** The device draws k at random in [0, n) and forms
   I1 = S0 + k, a 128-bit element of the public set S = {S0 + k}. n = 10^6.
   It sends H(I1) = SHA-256(I1).
2. **Repository answers O1.** The repository applies the *server's* PUF model to
   H(I1) and returns the 256-bit response O1.
3. **Request.** The device sends n, its 128-bit Timestamp encrypted under I1, O1,
   and a SHA-256 digest of those fields. The server, which owns the real PUF
   behind O1, searches S in hardware for the element whose hash gives O1. That
   recovers I1. It then decrypts the Timestamp and forms the session key
   SK = I1 xor Timestamp.
4. **Package.** The server picks a second element I2 in S. It asks the repository
   for O2, the *device's* modelled response to H(I2). It encrypts the image
   twice: first under SK, then under I2. It sends O2, the block count and the
   digest of the plaintext, then the ciphertext.
5. **Verify and unpack.** The device performs these steps in order:
   - It checks that the header came back within `DEADLINE_CYCLES` of the start.
   - It searches S with its own PUF to recover I2.
   - It decrypts each block under I2, then under SK.
   - It streams the plaintext to the staging port while hashing it.
   - It accepts the image only if the digest, the identifiers, the version and
     the best-before time all pass.

An eavesdropper sees O1 and O2 but cannot turn them back into I1 or I2 without
simulating a PUF a million times. A clone device has a different PUF, so its search
for I2 fails. A late package is refused before any search starts.

### Messages on the serial line

All fields are sent most significant byte first, 8N1, no flow control.

| Direction | Message | Bytes | Contents |
|---|---|---|---|
| device to host | challenge | 32 | H(I1) |
| host to device | response | 32 | O1 |
| device to host | request | 83 | n (3), E_I1(Timestamp) as two SIMON blocks (16), O1 (32), SHA-256 over {n zero-extended to 64 bits, both blocks, O1} (32) |
| host to device | header | 68 | O2 (32), block count (4), SHA-256 of the plaintext FI‖FV words (32) |
| device to host | go-ahead | 1 | 8'hA5, sent once I2 has been found and both keys are expanded |
| host to device | ciphertext | 8 per block | ((FI‖FV)_SK)_I2, one SIMON block at a time |
| device to host | report | 5 | status (1), elapsed clocks since the request started (4) |

If the exchange fails before the ciphertext phase (late, no key, empty package), the
report comes in place of the go-ahead. The host can tell them apart because status
codes are below 8'h10.

The go-ahead byte exists because the device cannot take ciphertext while it is still
searching. The receive FIFO holds only 16 bytes, and a search may take 0.69 s.

### The last block: version trailer

The final plaintext block of every package is the firmware version record FV
(`fwu_pkg::fv_trailer_t`):

| bits | field |
|---|---|
| 63:58 | zero |
| 57:26 | best_before, UNIX seconds |
| 25:18 | vendor identifier (`VENDOR_ID`, default 8'h5A) |
| 17:10 | device type identifier (`DEVTYPE_ID`, default 8'h3C) |
| 9:0 | version code |

The checks below run in this order. The first one that fails sets the status.

| status | code | cause |
|---|---|---|
| `ST_OK` | 0 | all checks passed; `fw_commit` pulses and `new_fv` holds the version |
| `ST_LATE` | 1 | header arrived more than `DEADLINE_CYCLES` after the request started |
| `ST_NOKEY` | 2 | no element of S makes this chip's PUF answer O2 (wrong chip or forged O2) |
| `ST_DIGEST` | 3 | SHA-256 of the decrypted words differs from the header's digest |
| `ST_MISMATCH` | 4 | vendor or device type differs |
| `ST_ROLLBACK` | 5 | version not newer than `installed_fv` |
| `ST_EXPIRED` | 6 | best_before is earlier than the device's UNIX time |
| `ST_BADLEN` | 7 | block count is zero |
| `ST_LOCKED` | 8 | updates are locked out; nothing else happens |

Every status except OK and LOCKED pulses `fw_discard` and counts as a failure.

## Key recovery by search

Both sides recover a key the same way. For k = 0, 1, … they form S0 + k, hash it
and present the hash to their own PUF. They stop at the first response that equals
the received one. In `challenge_search` one candidate costs 69 clocks:

| Clocks | Work |
|---|---|
| 1 | launch the hash |
| 65 | SHA-256 of the single padded block |
| 1 | PUF strobe |
| 1 | PUF response |
| 1 | compare |

The whole set therefore takes at most 69 million clocks, 0.69 s at 100 MHz, and half
that on average. An attacker with only the public model pays the model's simulation
time for each of those candidates instead.

The deadline (`DEADLINE_CYCLES`, default 500 million clocks = 5 s) is measured from
the start of the attempt to the arrival of the package header. It must cover the
server's own search plus the transfers, and should be shorter than any simulation of
the server's PUF over S.

## The dPPUF model

The physical dPPUF has the following structure:
- Two identical gate stacks, left and right, are fed the same 256-bit challenge.
- The layers alternate between XOR "boosters" and NAND "repressers".
- A row of arbiters records, bit by bit, which stack settled first.

The response depends on analog delays, so `dppuf.sv` is a behavioural model that
computes the race arithmetically:

- **Delays.** Each gate has an integer delay of 8 to 23 units. The delay is a hash
  of (SEED, side, layer, index). The whole table is computed once, at elaboration,
  as a constant.
- **Wiring.** Gate i of layer l reads nodes i and (i + 2^(l mod 8)) mod 256.
  Challenge bit i arrives at time 0 or 1, according to its value.
- **Booster** (XOR). The output settles at max(ta, tb) + d.
- **Represser** (NAND). A 0 on either input forces the output. So the output
  settles at the earliest controlling 0 + d, or at max(ta, tb) + d when both inputs
  are 1.
- **Arbiter.** The output bit is 1 when the left stack arrives first and 0 when the
  right one does. On a tie it takes the left stack's logic value.
- **Six layers** are used (`LAYERS`).

`SEED` stands for one chip's manufacturing variation. The test packages contain an
independent implementation of the same model (`fwu_ref_pkg::ppuf`). It plays the
public model for both the device (seed `PUF_SEED`) and the server (a different
seed).

**Limit of the model.** Flipping one challenge bit changes about 2% of the response
bits, while the published dPPUF reaches about 34%. Distinct challenges still give
responses about 26% apart, so the search over S never meets two matching
candidates. But the model's diffusion is not that of the real circuit. The layer
count, wiring and delay law are not published and were chosen here. The published design's
BCH fuzzy extractor, which would correct the noise of a real PUF, is not included,
because the model has no noise.

## Hardware blocks

```
 uart_rx ─► sync_fifo ─► fw_update_ctrl ─► uart_tx
                          │  ├ sha256_stream ─ sha256_core   (H(I1), request and image digests)
                          │  ├ simon64_128  u_cipher_a        (E_I1(Timestamp), then decrypt under I2)
                          │  ├ simon64_128  u_cipher_b        (decrypt under SK)
                          │  └ challenge_search ─ sha256_core (I2 search)
                          ├─ dppuf         (this chip's PUF; shared by the search)
                          ├─ rand_sel      (random k for I1)
                          ├─ timekeeper    (UNIX seconds, free-running clock count, Timestamp)
                          └─ fail_guard    (lock-out)
```

| module | what it does | timing |
|---|---|---|
| `fw_update_ed` | top level; wires the blocks below to the serial pins and the staging port | — |
| `fw_update_ctrl` | protocol state machine, message buffers, acceptance checks | see the exchange above |
| `sha256_core` | one 512-bit block compression; chains with `first = 0` | 65 clocks from `start` to `done` |
| `sha256_stream` | SHA-256 of a stream of 64-bit words with padding; valid/ready input | one core run per 8 words, plus one or two at the end |
| `simon64_128` | SIMON 64/128 encrypt/decrypt, 44 rounds, one round per clock, round keys expanded once into a 44-entry register file | key: 40 clocks; block: 45 clocks |
| `challenge_search` | the key search above | 69 clocks per candidate |
| `dppuf` | behavioural PUF model | response one clock after `valid` |
| `rand_sel` | xorshift32 draw masked to the next power of two, redrawn until below n | a few clocks |
| `timekeeper` | UNIX seconds (loadable), 64-bit clock counter; Timestamp = {seconds, clocks} | — |
| `fail_guard` | locks updates when `MAX_FAILS` failures fall within `WINDOW_CYCLES`; only `admin_clear` unlocks | — |
| `uart_rx`, `uart_tx` | 8N1 serial, `CLKS_PER_BIT` clocks per bit, two-flop input synchroniser | — |
| `sync_fifo` | 16-byte receive FIFO | — |
| `fwu_pkg`, `sha256_pkg` | widths, trailer struct, status codes; SHA-256 constants and functions | — |

The two SIMON cores let the device keep both keys expanded during the ciphertext
phase. Each block is decrypted by `u_cipher_a` (I2), then by `u_cipher_b` (SK).
Together with hashing, that is about 100 clocks per 64-bit block. This is far below
the 69,440 clocks one block takes on a 115200-baud line.

### Top-level ports (`fw_update_ed`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `uart_rx`, `uart_tx` | in/out | 1 | serial line to the host |
| `update_req` | in | 1 | pulse: start one update attempt |
| `admin_clear` | in | 1 | pulse: lift a lock-out |
| `time_set`, `time_sec` | in | 1, 64 | load the UNIX time |
| `installed_fv` | in | 10 | version of the installed firmware (held by the external store) |
| `busy`, `locked` | out | 1 | attempt running; updates locked out |
| `status`, `elapsed` | out | 8, 32 | last result and its duration in clocks (same values as the report) |
| `fw_wr_valid`, `fw_wr_addr`, `fw_wr_data` | out | 1, 32, 64 | staging port: decrypted words of FI, in order, word address from 0 |
| `fw_commit`, `fw_discard` | out | 1 | pulse at the end: install the staged image or throw it away |
| `new_fv` | out | 10 | version of the committed image |

The image is not stored on chip. The design streams it to the staging port, and the
non-volatile memory behind that port must hold it until `fw_commit` or `fw_discard`.
The trailer block is never written to the port.

### Parameters of the top and their defaults

| parameter | default | origin |
|---|---|---|
| `CLKS_PER_BIT` | 868 | 100 MHz / 115200 baud, both from the prototype |
| `CLK_HZ` | 100,000,000 | prototype clock |
| `SET_N` | 1,000,000 | size of S in the prototype |
| `S0` | 128'h0123_4567_89ab_cdef_0…0 | chosen |
| `DEADLINE_CYCLES` | 500,000,000 (5 s) | chosen |
| `VENDOR_ID`, `DEVTYPE_ID` | 8'h5A, 8'h3C | chosen |
| `PUF_SEED`, `PUF_LAYERS` | 32'h1234_5678, 6 | chosen |
| `RNG_SEED` | 32'hACE1_2468 | chosen |
| `MAX_FAILS`, `WINDOW_CYCLES` | 3, 6,000,000,000 (60 s) | chosen; the published design asks only for a lock-out after repeated failures in a short time |

## What follows the published design and what does not

These parts follow the published design:
- the protocol steps;
- the keys I1, I2 and SK = I1 xor Timestamp;
- the double encryption;
- the deadline check before the search;
- the search over S;
- the version, vendor, device type and best-before checks;
- the lock-out that only an administrator lifts;
- the Lightweight primitive set with the 256-bit dPPUF;
- the 10^6-element set;
- the 100 MHz clock;
- the 115200-baud 8N1 link.

These are this design's own choices:
- **Framing.** The message framing, the byte order, the go-ahead byte and the 5-byte
  report.
- **Trailer.** The trailer layout. The published FV is 10 bits. Here the trailer
  also carries a 32-bit best-before time and 8-bit identifiers.
- **Cipher mode.** SIMON is used as a plain block cipher, each block on its own
  (ECB). No chaining mode is specified.
- **Digests.** The request digest, and the plaintext digest in the header. The
  published design uses a SHA-256 checksum; where it sits is chosen here.
- **Timestamp.** A 128-bit value: {UNIX seconds, clock count}.
- **Deadline and lock-out.** The deadline value and the lock-out limits.
- **Random source.** A pseudo-random generator. A real device needs an entropy
  source here.
- **PUF model.** The dPPUF model described above.

Not built:
- **Other configurations.** The Midweight (Twofish) and Heavyweight (AES-GCM,
  SHA3-512) cores. Their algorithms are only named, and they are alternatives to
  the configuration built here.
- **Fuzzy extractor.** The BCH fuzzy extractor.
- **Firmware store.** The non-volatile firmware store.
- **Server and repository.** They are modelled in the testbenches only.

### Image sizes and time

Three firmware images have published update times for this configuration (1 kB taken
as 1024 bytes):

| image | 64-bit blocks | on-chip decrypt and hash | I2 search | serial transfer at 115200 baud | published total |
|---|---|---|---|---|---|
| Sercos III, 233 kB | 29,825 | ≈ 0.03 s | ≤ 0.69 s | ≈ 21 s | 0.34 s |
| Zelio Logic, 323 kB | 41,345 | ≈ 0.04 s | ≤ 0.69 s | ≈ 29 s | 0.47 s |
| Modicon M258, 1183 kB | 151,425 | ≈ 0.15 s | ≤ 0.69 s | ≈ 105 s | 1.73 s |

All three fit. The block count is 32 bits, the staging address is 32 bits, and
nothing is buffered on chip. The published times cannot include a transfer at
115200 baud. With this RTL the serial line, not the logic, sets the update time.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each also has a
watchdog. Build any of them with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_fw_update_ed \
  rtl/fwu_pkg.sv rtl/sha256_pkg.sv tb/fwu_ref_pkg.sv tb/fwu_host_pkg.sv \
  tb/tb_fw_update_ed.sv $(ls rtl/*.sv | grep -v _pkg)
./obj_dir/Vtb_fw_update_ed
```

| testbench | what it shows |
|---|---|
| `tb_sha256_core`, `tb_sha256_stream` | digests against an independent SHA-256 in `fwu_ref_pkg`, message lengths 0 to several blocks, 65-clock latency |
| `tb_simon64_128` | the published SIMON 64/128 test vector, random encrypt/decrypt round trips against the reference, 40- and 45-clock latencies |
| `tb_dppuf` | responses against the reference model, two seeds differ, one-clock latency |
| `tb_challenge_search` | finds the planted key, reports not-found, 69 clocks per candidate |
| `tb_rand_sel` | range, spread and small n |
| `tb_timekeeper`, `tb_fail_guard`, `tb_uart_rx`, `tb_uart_tx`, `tb_sync_fifo` | their block's behaviour and timing |
| `tb_fw_update_ctrl` | the controller at the byte level with n = 16: every status code, commit/discard/fail pulses, recovered I1 and Timestamp |
| `tb_fw_update_ed` | the whole chip over its serial pins (8 clocks per bit, n = 16). It runs one update after another and counts each mechanism: time set, accepted update, go-ahead, digest error, foreign vendor, rollback, expired, late, wrong chip, empty package, lock-out after three failures, refused request while locked, administrator unlock. A mechanism that never happens counts as a failure. |
| `tb_fw_update_ed_full` | the top with every default: 868 clocks per bit, n = 10^6. The host model searches the full set in the same way. One complete update runs in about 13 million clocks, about 40 s of simulation. |

`fwu_ref_pkg` holds the reference SHA-256, SIMON and dPPUF, written independently of
the RTL. `fwu_host_pkg` builds the server and repository behaviour from them.
