# WPA2-Personal password search on FPGA: fully pipelined SHA1 brute force cores

Checking one WPA2-Personal password guess against a captured 4-way handshake
costs 16,396 SHA1 compressions: 16,386 for the PBKDF2 master key (PMK), 5
for the key confirmation key (KCK) and 5 for the message integrity code
(MIC). The work has no memory footprint, so it suits an FPGA well, and the
design here spends almost all of its area on one idea. Each brute force core
holds an 83-stage SHA1 pipeline that takes one 512-bit block per clock, and
keeps 83 password candidates in flight, one per stage. Every candidate needs
one SHA1 result before it can form its next block. The pipeline's latency
equals the number of candidates, so a result for candidate *s* comes out in
the same cycle in which candidate *s* must issue its next block. The pipeline
is never idle and needs no handshake.

This RTL implements the FPGA design of Kammerstetter et al., "Efficient
High-Speed WPA2 Brute Force Attacks using Scalable Low-Cost FPGA Clustering".
It has a shared password generator, a global state machine and N brute force
cores, each with a WPA2 state machine, a password verifier and a SHA1
pipeline. The defaults follow the published Spartan-6 XC6SLX150T build: 2
cores, 8-character passwords over `A`..`Z`.

## What one guess costs

For a password *P* and a network name *SSID* (all HMACs are HMAC-SHA1):

| quantity | definition | SHA1 compressions |
|---|---|---|
| HMAC key states | `ostate = SHA1(P ^ opad)`, `istate = SHA1(P ^ ipad)`, computed once and cached | 2 |
| PMK block 1 | `U1 = HMAC(P, SSID ‖ 00000001)`, `Ui = HMAC(P, Ui-1)`, `T1 = U1 ^ … ^ U4096` | 2·4096 |
| PMK block 2 | the same with counter `00000002`, giving `T2` | 2·4096 |
| PMK | `T1 ‖ T2[159:64]` (256 bits) | |
| KCK | first 128 bits of `HMAC(PMK, "Pairwise key expansion" ‖ 0 ‖ min/max(MACs) ‖ min/max(nonces) ‖ 0)`. The message is 100 bytes. | 5 |
| MIC | first 128 bits of `HMAC(KCK, EAPOL frame with MIC zeroed)` | 5 |

Because the key states are cached, each HMAC with a message of one block
costs two compressions: one with the inner state, one with the outer state.
The SSID (at most 32 bytes) and the counter fit in a single padded block, so
the salt step is also a single compression.

## The brute force core (`wpa2_core`)

### Steps

All 83 candidates of a core move in lock step. A *step* lasts 83 cycles. In
it, slots 0..82 each take the previous step's result for that slot from the
pipeline output, and each feeds its next block to the pipeline input. One run
is this sequence of steps:

| phase | step | pipeline output consumed | block issued (chaining state, block) |
|---|---|---|---|
| PMK | OSTATE | — | (IV, P ⊕ opad), with P taken straight from the generator and written to RAM |
| | ISTATE | ostate → RAM | (IV, P ⊕ ipad), with P read back from RAM |
| | SALT (c=1) | istate → RAM | (istate, SSID ‖ INT(1) padded) |
| | FINAL | inner digest | (ostate, digest padded) |
| | ITER ×4095 | U*i*; T ^= U*i* | (istate, U*i* padded), then back to FINAL |
| | SALT (c=2) | U4096, so T1 = T → RAM | (istate, SSID ‖ INT(2) padded) |
| | FINAL / ITER as above | | |
| PTK | OSTATE | U4096 of block 2, so PMK = T1 ‖ T2[159:64] → RAM | (IV, PMK ⊕ opad) |
| | ISTATE | ostate → RAM | (IV, PMK ⊕ ipad) |
| | SALT ×2 | istate, then the state after the first block | the two blocks of the 100-byte PRF message |
| | FINAL | inner digest | (ostate, digest padded) |
| MIC | OSTATE | PTK, so KCK = PTK[159:32] → RAM | (IV, KCK ⊕ opad) |
| | ISTATE, SALT ×2, FINAL | as for the PTK | the two blocks of the EAPOL frame |
| | CHECK | MIC | nothing; the MIC is compared with the observed one |

That makes `4·ITER + 13` steps, or 16,397 × 83 = 1,360,951 cycles for
ITER = 4096. This is one pass more than the published 16,396 compressions,
because the design spends a whole step on the compare (CHECK).

### Memories and bookkeeping

Per-slot values sit in small two-port memories (`slot_ram`), addressed by
the slot number, not in wide registers:

- password and a valid bit
- istate and ostate
- the PBKDF2 accumulator T
- T1
- the key of the PTK and MIC phases, that is the PMK and later the KCK

Each memory reads with one cycle of latency. The read address is always the
*next* slot, so the word is ready in the cycle when its slot comes up. After
ISTATE the password is not needed again. A hit is reported as
`base_count + slot`, where `base_count` is the generator offset of slot 0.
So the design outputs an offset from the start password, not the password.

### Constant data

The padded SHA1 blocks for the salt (for c = 1 and 2), the PRF message and
the EAPOL frame depend only on the working block. They are formed once in
registers. The core builds the padding, the fixed PRF label and the sorting
of MACs and nonces. The host supplies only the variable handshake fields.

### Loading the handshake data

Every core has its own shift register of `hs_data_t`, 1,776 bits. It is
filled over a shared 16-bit bus with 111 words, most significant word first:

| field | bits | meaning |
|---|---|---|
| `aa` | 48 | access point MAC |
| `spa` | 48 | station MAC |
| `anonce` | 256 | |
| `snonce` | 256 | |
| `eapol_len` | 16 | frame length in bytes, at most 119 |
| `eapol` | 1024 | the EAPOL frame with its MIC field zeroed, first byte on top |
| `mic` | 128 | the MIC observed in the handshake |

Only the passwords and the SSID are needed early, so only they travel on wide
buses.

## The SHA1 pipeline (`sha1_pipeline`, `sha1_round`, `delay_line`)

The pipeline has 83 stages:

1. **Buffer.** Registers the caller's multiplexed inputs so that the
   multiplexers do not lengthen the first round's path.
2. **Initiate.** Loads A..E, pre-adds `E + W0 + K0` and expands W16.
3. **80 round stages.** A SHA1 round has four additions in a chain. Here the
   round stage for round *t* computes `A' = rol(A,5) + f_t(B,C,D) + pre`, where
   `pre = E + W_t + K_t` was added one stage earlier. In parallel it forms the
   next round's `pre = D + W_{t+1} + K_{t+1}`, because D becomes E. Each stage
   therefore holds two chained additions instead of four. The message schedule
   travels as a 16-word window, and each stage adds one new word.
4. **Add.** Adds the chaining state to A..E (the SHA1 feed-forward).

The 160-bit chaining state does not ride through the 80 round registers. It
is written into a RAM delay line (`delay_line`, 81 cycles) after the Buffer
stage, and it comes out at the Add stage. A block presented in cycle *c*
leaves in cycle *c* + 83.

## Password generator (`password_generator`)

The generator is an odometer over `PW_CHARS` characters in the range
`CHAR_FIRST..CHAR_LAST`. The last character is the least significant. A
synchronous `reset` loads `start_password` and `n`. Each cycle with `enable`
high and `done` low moves to the next candidate, and `count` gives the
current candidate's offset. `done` rises after `n` candidates.

The carry logic is kept off the increment path. Every position keeps a
registered "at last character" flag. The carry into a position is the AND
of the flags to its right, and the same registered flag selects between
"+1" and "wrap to first".

## Global state machine (`bf_controller`) and the top (`wpa2_bf_top`)

On `start` the controller loads the generator. It then fills core 0, core 1,
… one after the other, each for 83 cycles with the generator enabled. Next it
pauses the generator and waits until every started core is idle. If a core
hit, or the generator is exhausted, it pulses `done` with `found` and
`found_offset` and returns to idle. Otherwise it refills the cores.

Filling and draining in rounds like this costs 83 cycles per core per round,
against 1.36 million cycles of computation. Once the generator is done, no
further core is started. Slots beyond the last candidate are marked invalid
and never report a hit.

Top-level use:

1. Shift in the 111 handshake words (`hs_shift`, `hs_word`).
2. While `idle`, pulse `start` with `start_password`, `n`, `ssid` (first byte
   in bits 255:248) and `ssid_len`.
3. Wait for `done`.

## Throughput

A batch of `NUM_CORES × 83` candidates takes `16,397·83 + 83·NUM_CORES + 1`
cycles. At 180 MHz with 2 cores that is 21,952 passwords/s, against the
published 21,956 (the published rate counts 16,396 passes). With
`NUM_CORES = 8` (the published Artix-7 build) it is 87,778/s. With 16 cores
at 216 MHz (Kintex-7) it is about 210,565/s.

## Where this RTL departs from the published design, or stops short

- **Single clock.** The published boards use a slow clock for host
  communication and a fast, run-time adjustable clock for computation: a
  programmable multiplier on Spartan-6, temperature-driven scaling on
  Artix-7. None of that clocking is here. The working block enters as plain
  synchronous ports.
- **No host bus.** The FPGA side of the microcontroller bus is not built:
  8-bit read and write buses, write start and select. Its protocol is not
  published.
- **Message expansion.** It is computed one word per stage. The original packs
  several expansion steps into one stage to help shift-register inference.
  The results are the same; only the placement differs.
- **Extra pass.** The compare takes one extra pipeline pass, the CHECK step.
- **Frame length.** The EAPOL frame must fit two SHA1 blocks (≤ 119 bytes),
  which matches the published count of 5 compressions for the MIC. A frame
  that carries a 22-byte RSN information element (121 bytes) would need a
  third block and is not supported.
- **Password length.** Passwords are fixed at 8 characters over one
  contiguous character range.
- **Own choices.** The memory layout, the bus protocol between controller and
  cores, the field order of `hs_data_t` and the exact split of the round
  additions are choices made for this RTL. The published description gives
  the structure but not these details.

## Files

| file | contents |
|---|---|
| `rtl/wpa2_pkg.sv` | shared types, SHA1 constants, HMAC pads, `hs_data_t`, core step enum |
| `rtl/sha1_round.sv`, `rtl/delay_line.sv`, `rtl/sha1_pipeline.sv` | SHA1 pipeline |
| `rtl/slot_ram.sv` | per-slot memory |
| `rtl/password_generator.sv`, `rtl/bf_controller.sv`, `rtl/wpa2_core.sv` | generator, global FSM, core |
| `rtl/wpa2_bf_top.sv` | top |
| `tb/wpa2_ref_pkg.sv` | behavioural SHA1 / HMAC / PBKDF2 / PRF / MIC model used as reference |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus `tb_ref_selftest` (the reference model against published vectors) and `tb_wpa2_bf_top_full` |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and finishes. For
example, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/wpa2_pkg.sv tb/wpa2_ref_pkg.sv tb/tb_wpa2_bf_top.sv --top-module tb_wpa2_bf_top
./obj_dir/Vtb_wpa2_bf_top
```

The testbenches:

- **`tb_wpa2_bf_top`** runs the whole design with `ITER = 2` through three
  working blocks: a hit in the second fill round with a carry through several
  characters, an exhausted block, and a hit in core 1. It counts that fills,
  refills, partial fills, carries, hits and exhaustion each occur.
- **`tb_wpa2_bf_top_full`** runs one complete batch of 166 candidates at the
  default parameters (4096 iterations). That is 1,361,039 cycles and takes
  about a minute.
- **`tb_wpa2_bf_scaling`** runs the 8-core and 16-core configurations of
  the larger published builds (at `ITER = 1`) on one working block that
  fills every core.
- **`tb_wpa2_core`** uses `ITER = 3` and checks the exact busy time.

## Changing it

- `NUM_CORES` on `wpa2_bf_top` sets the number of cores.
- `CHAR_FIRST`/`CHAR_LAST` set the character range.
- `ITER` shortens PBKDF2, for simulation only.

The number of slots per core is tied to the pipeline depth (`SHA1_STAGES` in
`wpa2_pkg`). If you add or remove a pipeline stage, the core's slot count
follows, and the lock-step timing stays correct.
