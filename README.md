# FPGA enclaves with a hardware attestation engine

An FPGA can hold a trusted execution environment that shares nothing with
the main processor. Each *enclave* has its own softcore CPU, block RAM and
peripherals, wired together in the FPGA fabric. The hardcore system (the
Cortex-A side of an SoC FPGA, running an untrusted OS) has no wire into any
of them: it can only write a shared DRAM area and raise a few interrupt
lines. Isolation comes from the absence of wires, not from a
memory-protection unit that software could misconfigure. Because no CPU is
time-shared, there is no shared cache to leak through either.

This RTL builds the part of such a system that is logic rather than vendor
IP. It follows the BYOTee architecture (M. Armanuzzaman, A.-R. Sadeghi,
Z. Zhao, "Building Your Own Trusted Execution Environments Using FPGA"):

* the per-enclave address maps that make up the walls;
* the enclave and shared block RAMs;
* the service-request interrupt path from the hardcore system;
* **Hw-Att**, a trusted engine with a private port into an enclave's
  whole block RAM. It verifies and decrypts a protected application and
  produces signed pre- and post-execution measurements. When an application
  is suspended, it also encrypts and signs the saved state. The enclave's
  own firmware never holds the keys, so a compromised firmware can neither
  forge a report nor read a suspended application's state.

The softcore CPUs, the hardcore system, DRAM, clocking and the FPGA's
bitstream-configuration logic are not part of this RTL. The CPUs and DRAM
connect through ports of the top module.

## The system around the RTL

A security-sensitive application (SSA) is shipped encrypted and
MAC-protected ("SSA\*"). To run it, the untrusted application (UA) on the
hardcore system fills an *SSA Execution Block* (SEB) in shared DRAM. The SEB
holds SSA\*, its tag, the configuration measurement `m`, a verifier
challenge `Chal` and the input. The UA then raises a load-and-execute
interrupt on the enclave. The enclave firmware, Hw-Att and the SSA then run
these steps:

| step | who | what |
|---|---|---|
| 1 | firmware | copies SSA\*, tag, `m`, `Chal` and input from the SEB into enclave BRAM; masks further LdExec\* requests |
| 2 | Hw-Att | verifies the HMAC-SHA512 tag over SSA\*, then decrypts it with AES-256-CBC to where the SSA code lives |
| 3 | Hw-Att | pre-execution measurement (keyed BLAKE2s) over vector table, firmware, `m`, `Chal`, input and SSA code; the firmware copies the report (*PreExecAtt*) to the SEB |
| 4 | SSA | runs and writes its output to BRAM (and, for a distributed application, to a shared BRAM another enclave reads) |
| 5 | Hw-Att | post-execution measurement over the same regions plus output and PreExecAtt (*PostExecAtt*) |
| 6 | firmware | copies output and PostExecAtt to the SEB |
| 7 | firmware | clears every SSA-related BRAM region and waits for the next request |

All measurements read BRAM, not DRAM: the hardcore system can change DRAM
at any time, so only the BRAM copy says what will really run.

A running SSA can also be parked outside the enclave and brought back later:

* **SusExp** (suspend and export): the firmware saves the SSA's registers
  and writable sections in BRAM next to an IV. Hw-Att encrypts them
  (AES-256-CBC) and signs the IV and ciphertext (HMAC-SHA512). The blob and
  its tag go to the SEB, and the BRAM is cleared.
* **ReExec** (restore and execute): the firmware copies the blob back.
  Hw-Att checks the tag and decrypts the blob into place. The firmware then
  reloads the registers and resumes the SSA.

A blob that the hardcore system has altered fails the tag check and is never
decrypted.

## Top level: `byotee_soc`

The top holds the two-enclave configuration of the distributed example
application. Enclave-1 has a 128 KB block RAM, the SEB window, the
interrupt block and Hw-Att. Enclave-4 has a 32 KB block RAM. The two share an
8 KB block RAM. The Enclave-1 side is in the *hardware-attestation
profile*, with Hw-Att on its memory's second port.

```
 hardcore system                        FPGA fabric
 ───────────────      ┌──────────────────────────────────────────────────────┐
 DRAM (SEB) ◄─seb_req─┤ e1 xbar ─┬─ 0x0000_0000 128 KB ─ bram_dp A  B ─ hw_att│
 hc_irq[5:0] ─────────┤          ├─ 0x0010_0000   8 KB ─ shared A       │     │
                      │          ├─ 0x2000_0000   2 MB ─ SEB window     │     │
  Enclave-1 CPU ─e1───┤          ├─ 0x4000_0000   4 KB ─ enclave_irq_ctrl     │
                      │          └─ 0x4001_0000   4 KB ─ hw_att registers     │
  Enclave-4 CPU ─e4───┤ e4 xbar ─┬─ 0x0000_0000  32 KB ─ bram_dp A            │
                      │          └─ 0x0010_0000   8 KB ─ shared B             │
                      └──────────────────────────────────────────────────────┘
```

What the map does *not* contain matters as much as what it does.
Enclave-4 has no DRAM window and cannot reach Hw-Att or Enclave-1's memory.
The hardcore system reaches no BRAM at all. Hw-Att's key registers are on no
bus. An access outside a map gets `err=1` one cycle later and never reaches
a target.

Parameters (defaults are the reference system's sizes): `E1_BRAM_BYTES =
131072`, `E4_BRAM_BYTES = 32768`, `SHARED_BRAM_BYTES = 8192`, `SEB_BYTES =
2097152`. The addresses are this design's choice. The 2 MB SEB and its
`0x2000_0000` base come from the reference system's example enclave
description.

### The bus

To keep the walls easy to read, every block uses one small
request/response bus instead of AXI (`byot_pkg::bus_req_t` and
`bus_rsp_t`). A request is a one-cycle `valid` pulse carrying a byte address,
write enable, data and byte enables. The response is a one-cycle `ready`
strobe carrying read data and `err`. A master has at most one request in
flight. Data are 32-bit little-endian words, as on the 32-bit softcores the
enclaves use. Replacing it with AXI4-Lite is a matter of adapters at the
CPU and DRAM ports.

## Hw-Att: the attestation engine

`hw_att` is the hardest block to understand and the one that carries the
security argument. It has three parts:

* a register slave for the firmware;
* a BRAM master;
* three crypto cores: `aes256_core` (both directions), `sha512_core` and
  `blake2s_core`, each one round per clock.

The keys (`K_ENC` for AES-256, `K_MAC` for HMAC, `K_ATT` for the reports)
are parameters, that is, constants in the bitstream. No register reads them
back.

### Registers (byte offsets from 0x4001_0000 in Enclave-1)

| offset | name | |
|---|---|---|
| 0x00 | CMD | write `hwa_cmd_e` in [3:0]; starts the command (ignored while busy) |
| 0x04 | SRC | region start in enclave BRAM |
| 0x08 | LEN | region length in bytes (multiple of 4; of 16 for DECRYPT and ENCRYPT) |
| 0x0C | DST | output address (plaintext, report) or address of the 64-byte tag |
| 0x10 | STATUS | bit0 busy, bit1 MAC matched, bit2 error, bit3 report valid |
| 0x20–0x3C | REPORT | the last measurement, eight words |

The `done` output pulses when a command ends. A firmware that does not use
the pulse polls STATUS.busy.

### Commands

* `DECRYPT`: SRC points at a 16-byte IV followed by LEN bytes of
  ciphertext. The plaintext is written at DST. CBC chaining is done in
  Hw-Att: P<sub>i</sub> = AES⁻¹(C<sub>i</sub>) ⊕ C<sub>i−1</sub>, with
  C<sub>0</sub> = IV. The AES key schedule is built on first use (52
  cycles) and kept.
* `ENCRYPT`, used to suspend an SSA: SRC points at a 16-byte IV followed by
  LEN bytes of plaintext. DST receives the IV, then the ciphertext
  C<sub>i</sub> = AES(P<sub>i</sub> ⊕ C<sub>i−1</sub>). The blob therefore
  has the same layout as a protected SSA, and DECRYPT undoes it. Hw-Att has
  no random source, so the firmware supplies the IV. It must not reuse one
  under the same key; a counter is enough.
* `MAC_START`, `MAC_ADD` (any number), `MAC_CHECK`: HMAC-SHA512 with
  `K_MAC` over the concatenation of the regions given to MAC_ADD.
  MAC_CHECK pads the inner hash and runs the outer hash. It then compares
  the result byte for byte with the 64 bytes at DST and sets STATUS.bit1
  on a match. The tag covers IV and ciphertext (encrypt-then-MAC), so the
  firmware checks it *before* DECRYPT. `MAC_SIGN` finishes the same way
  but writes the 64-byte tag at DST instead of comparing. It is used to sign
  a suspended SSA's blob.
* `MEAS_START`, `MEAS_ADD` (any number), `MEAS_END`: BLAKE2s keyed with
  `K_ATT` over the concatenation of the regions. MEAS_END writes the
  32-byte result to DST and to REPORT. The regions of a post-execution
  measurement are not contiguous (code, inputs, output, previous report),
  so the interface absorbs a list of regions.

A keyed hash with a key that only Hw-Att holds serves as the signature. A
verifier who shares `K_ATT` checks it, and the firmware can copy the report
but cannot compute one. A public-key signature would need a larger engine
and is not built.

### How the hashing works inside

Both hashes share one 128-byte block buffer in memory byte order. Words
read from BRAM are appended to it:

* **BLAKE2s** uses the first 16 words as little-endian message words.
  MEAS_START preloads the key block (the 32-byte key, zero-padded, as
  BLAKE2 keyed mode requires) and sets the byte counter to 64. A full
  buffer is compressed only when one more word arrives, because BLAKE2
  must flag the *last* block and a region list can end at any time. If
  nothing is added, the key block itself is the last block.
* **SHA-512** uses all 32 words, byte-swapped into big-endian 64-bit
  words. MAC_START preloads K ⊕ ipad and counts 128 bytes. MAC_CHECK
  appends 0x80 and the 128-bit bit-length. If fewer than 16 bytes remain
  in the block, the padding spills into one extra block. The outer hash is
  two compressions: K ⊕ opad, then the inner digest padded to a 192-byte
  message.

Lengths are whole words, which is what the firmware's word copies produce.

### Latency

The hash and cipher cores need 11 cycles (BLAKE2s), 81 (SHA-512) and 14
(AES block, after a 52-cycle key schedule). Each BRAM word takes two
cycles. Measured on the full-size fabric for the example applications'
protected-SSA sizes (`tb_workload_ssa`):

| image | HMAC verify or sign | AES-CBC decrypt | AES-CBC encrypt | BLAKE2s measure |
|---|---|---|---|---|
| 2,608 B | 4,057 cycles | 6,587 | 6,545 | 2,612 |
| 12,896 B | 18,657 | 32,253 | 32,265 | 12,743 |
| 20,160 B | 28,866 | 50,413 | 50,425 | 19,886 |

That is about 2.5 cycles/byte to encrypt or decrypt, 1.4 to verify or sign
and 1 to measure. At 100 MHz, decrypting the 12.9 KB image takes 0.32 ms.
The reference system did the same in firmware on a 100 MHz softcore in
about 2.8 s.

## Service interrupts: `enclave_irq_ctrl`

The UA starts every service with an interrupt: LdExec, LdExecPreAtt,
LdExecPostAtt, SusExp, ReExec (ids 0–4) and NewData (id 5). This block
stands for the GPIO the hardcore system writes plus the enclave's interrupt
controller:

* A rising edge on `hc_irq[i]` sets pending bit i. `cpu_irq` rises one
  cycle later if the bit is enabled.
* ACTIVE (0x0C) gives the lowest pending id. ACK (0x08) clears bits,
  write-one-to-clear.
* ENABLE (0x04) lets the firmware mask the LdExec\* requests once it has
  copied their data, so a malicious UA cannot re-trigger a load half-way.
* CONTROL.bit0 (0x10) is set by the firmware while an SSA runs. During that
  time NewData, the lowest priority, is held pending and not delivered. It
  arrives as soon as the firmware has control again, which is how a
  streaming SSA gets its next input chunk without being preempted.
  SusExp and the others still get through.

The hardcore system can still flood an enclave with requests (denial of
service). Priority and masking limit what that costs the enclave but cannot
stop the hardcore system from trying.

## Memories: `bram_dp`

A true dual-port RAM of 32-bit words with byte enables and a one-cycle read.
The contents start at zero, as the reference device clears all block RAM
when it is configured. That clearing is what defeats cold-boot reads of an
enclave's memory. An access past `DEPTH_BYTES` answers `err` and writes
nothing: a port cannot wrap around into lower addresses. If both ports
write the same word in the same cycle, port B wins.

## Address maps: `enclave_xbar`

NT windows `(BASE[i], SIZE[i])`, power-of-two sized and aligned. A CPU
request is passed, combinationally and with the base subtracted, to the one
target whose window holds it. An assertion checks that windows never
overlap. A miss is refused one cycle later. Most of its output bits come
straight from the CPU request (the wires of the interconnect).

## How far this can be trusted

Every block has a self-checking testbench. Each was also run against a
deliberately broken copy of its block and caught it:

* `tb_aes256_core`: FIPS-197 C.3 and SP 800-38A ECB-AES256 vectors in both
  directions, key-schedule and block latency.
* `tb_sha512_core`, `tb_blake2s_core`: the FIPS/RFC "abc" digests, the
  empty message, multi-block messages and edge cases. For SHA-512 the edge
  case is padding that needs its own block; for BLAKE2s it is a full block
  flagged last. The latency and busy flag are checked on every
  compression.
* `tb_hw_att`: HMAC match and mismatch (including the padding-spill case),
  CBC decryption, measurements over region lists (including the empty list
  and one exactly full block), error and busy flags. The expected values
  come from an independent software HMAC-SHA512 and keyed BLAKE2s.
  Also suspend and restore: ENCRYPT and MAC_SIGN must produce a known blob
  and tag, and MAC_CHECK plus DECRYPT must recover the plaintext.
* `tb_bram_dp`: 2,000 random dual-port cycles against a model, zero
  initial contents, out-of-range refusal.
* `tb_enclave_xbar`: routing, base removal, refusal of holes.
* `tb_enclave_irq_ctrl`: edge capture, priority, masking, the NewData rule.
* `tb_byotee_soc`, at full size: a rejected tampered SSA, then one complete
  LdExecPreAtt service (steps 1–7 above) with the output passed to
  Enclave-4 through the shared BRAM. It also probes isolation from both
  CPUs. PreExecAtt and PostExecAtt must equal software-computed values, and
  every mechanism (interrupt, NewData hold and release, refusal, MAC accept
  and reject, decryption, both measurements, shared-BRAM hand-off,
  clean-up, suspend, restore) must occur at least once. The run suspends
  the SSA once (SusExp) and then restores it (ReExec). The first restore
  uses a tampered blob, which must be refused; the second uses the intact
  blob.
* `tb_workload_ssa`: full-size fabric, protected images of the three
  example sizes. The measurement of the decrypted plaintext is compared
  with a software AES-256-CBC + BLAKE2s reference, which checks the
  decryption end to end. Re-encrypting the plaintext with the image's IV
  must give back the image byte for byte, and signing it must give back its
  tag.

What is not verified: timing closure or area on a real FPGA, and behaviour
with a real softcore CPU and AXI interconnect. The firmware steps exist only
as testbench code.

## Where this departs from the reference system, and what is missing

* **Hw-Att is RTL.** The reference system's description calls Hw-Att an RTL
  module in one place. Its evaluation reports a 1,400-line C implementation
  on a softcore. This design is RTL. Its command set, register map, key
  storage as parameters, keyed-BLAKE2s "signature" and encrypt-then-MAC
  layout are this design's choices. BLAKE2 is named without a variant
  there; BLAKE2s is used here.
* **Suspend encryption is in Hw-Att.** The reference system has the
  firmware encrypt and sign a suspended SSA with the developer key. Here
  that key exists only inside Hw-Att, so the firmware asks Hw-Att to do it
  (ENCRYPT, MAC_SIGN). The crypto algorithms are the same.
* **Bus.** A minimal one-outstanding bus instead of AXI interconnect IP.
* **One interrupt block** instead of an AXI GPIO plus an AXI interrupt
  controller. Its register offsets, edge capture and fixed priority are
  this design's choices.
* **Enclave-4's memory.** Kept at the stated 32 KB, although the example
  application's firmware and SSA sizes listed for that enclave (35,748 +
  31,088 bytes) would not fit in it. The two numbers conflict; the memory
  size was followed.
* **Not included:**
  * the softcore CPUs, the hardcore system and DRAM, clocking and reset IP;
  * the FPGA's bitstream-configuration logic, which produces `m`;
  * the debug module;
  * the peripherals of the other example enclaves: button GPIO and PWM
    LED, I2S audio transmitter with DMA and FIFO, XADC.
  These are vendor parts or parts whose internals are not given.
  Saving and reloading an SSA's CPU registers during SusExp/ReExec is
  firmware work. The interrupts, the encryption and the signing are here.
* **Time of check versus time of use.** A measurement is a snapshot of the
  BRAM when Hw-Att reads it. Memory changed between two measurements goes
  unseen.
* **Replay.** Nothing stops replay of an old SSA\* or SEB. A reference
  number per message would stop it, but that is not built.

## Simulating

Plain Verilator 5. The package must come first. `-y rtl` finds the other
modules:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/byot_pkg.sv tb/tb_byotee_soc.sv --top tb_byotee_soc
./obj_dir/Vtb_byotee_soc
```

Every testbench ends with `TB_RESULT checks=N failures=M`, and a watchdog
ends a hung run with a failure. Swap in any `tb/tb_*.sv` the same way. The
designs use no vendor primitives: the memories are plain arrays, and the
AES S-boxes are computed at elaboration from the GF(2⁸) inverse and the
affine map rather than typed in.

Files: `rtl/byot_pkg.sv` (bus types, command and interrupt encodings),
`rtl/byotee_soc.sv` (top), `rtl/hw_att.sv`, `rtl/aes256_core.sv`,
`rtl/sha512_core.sv`, `rtl/blake2s_core.sv`, `rtl/bram_dp.sv`,
`rtl/enclave_xbar.sv`, `rtl/enclave_irq_ctrl.sv`. There is one testbench per
block in `tb/`, plus `tb/tb_workload_ssa.sv`.
