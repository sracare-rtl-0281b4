# SRACARE prover in SystemVerilog

## The problem and the idea

A small RISC-V device boots from an external SPI flash. If someone rewrites
that flash, the conventional answer is a secure boot that refuses to start
and leaves the device dead until a technician reflashes it, and a remote
attestation (RA) scheme that reports the damage over a link that itself has
to be trusted. SRACARE handles both in one small engine that sits in the
trusted hardware next to the processor:

* the flash image is cut into 1 KB **frames**. Each frame carries its own
  keyed digest (HMAC-SHA256), so a corrupted frame can be found and dealt with
  on its own;
* boot is a **chain of trust** over the frames, `I(i+1) = I(i) & V(i)`. The
  processor is held until every frame has passed;
* a frame that fails is **rewritten from a golden copy** in secure ROM by the
  Resilience Engine. It is then checked again, and the region is marked
  read-only for the processor's PMP (physical memory protection). The device
  heals itself instead of bricking;
* the verifier reaches the device over a **lightweight mutual-authentication
  protocol** built from the same HMAC core. The prover's fresh nonce `n2` is
  derived from a hash of the chip information, so no TRNG (true random number
  generator) is needed. After authentication the verifier can order an RA
  digest of a flash region or a secure boot with repair;
* one HMAC-SHA256 core (the "crypto-core") is shared by code authentication
  (the CA unit), recovery and the protocol. This sharing is the CARE module
  (Code Authentication and Resilience Engine).

Unlike the original proof of concept, this design does the Resilience Engine
and the prover side of the protocol in hardware too. That proof of concept
ran them as C code on the processor. Here the processor is not part of the
trusted base at all: it only receives `core_fetch_enable` and the PMP lock
outputs.

## Block structure

```
            uart_rx/tx                       spi_* (dedicated SPI bus)
                |                                  |
             [uart] <-> [prover_protocol]     [flash_ctrl]--[spi_master]
                            |      |  \            |  ^
                     HMAC port1   CA cmd  boot_req  |  | (mux: RE while it runs)
                            |      |      \        |  |
              +-------------+------+-------\-------+--+--------+
              | care:  [hmac_arbiter] -> [hmac_sha256] -> [sha256_core]
              |         port0 <- [ca_unit]   [resilience_engine]
              +------------------------------------------------+
                                   ^            ^ rom port
                      [secure_boot_ctrl]   [secure_rom] <- prov_* (factory)
                         |
                 core_fetch_enable, pmp_lock_mask/base  -> processor (outside)
```

| Module | What it does |
|---|---|
| `sracare_pkg` | Sizes, SPI NOR opcodes, flash/CA operation enums, HMAC request/response structs |
| `sha256_core` | FIPS 180-4 compression, one round per clock (66 clocks per block) |
| `hmac_sha256` | Streaming HMAC-SHA256 (RFC 2104) with a 256-bit key, plus a plain SHA-256 mode |
| `hmac_arbiter` | Two requesters share one HMAC core: CA first, then protocol; the grant is held for a whole job |
| `secure_rom` | Chip info, key and golden frame records; writable only in provisioning mode |
| `spi_master` | SPI mode 0 byte shifter, SCLK = clk / (2·CLK_DIV) |
| `flash_ctrl` | SPI NOR commands: read (03h), write enable (06h), page program (02h) split at 256-byte pages, 4 KB sector erase (20h), busy polling (05h) |
| `ca_unit` | Verifies one frame record (recomputes the digest and compares) or digests any flash region |
| `resilience_engine` | Locate, reflash, lock: checks the golden record's frame number, erases the sector, programs the record from ROM and raises the PMP lock |
| `secure_boot_ctrl` | Chain of trust over the frames, with one repair and re-check per frame, then halt or release |
| `uart` | 8N1 receiver and transmitter |
| `prover_protocol` | Prover side of the authentication protocol, then RA or secure boot on the verifier's request |
| `care` | Crypto-core, arbiter, CA unit and RE, with the flash port handed to the RE while it runs |
| `sracare_top` | The whole prover |

## Frame record

A record is 1064 bytes and lives at flash offset `i·4096`, one per 4 KB
sector, so a repair erases only its own frame:

| bytes | field |
|---|---|
| 0..31 | digest = HMAC(K, frame number ‖ offset ‖ data) |
| 32..35 | frame number, big-endian |
| 36..39 | offset of the data in the application image, big-endian |
| 40..1063 | 1 KB of application code |

The digest covers the header too, so a frame copied to the wrong slot fails.
The ROM holds the same records as golden copies.

## Secure ROM map

| address | content |
|---|---|
| 0x000 | chip information, 16 bytes (serial number, versions, UUID) |
| 0x010 | shared key K, 32 bytes |
| 0x040 + i·1064 | golden record of frame i |

Factory provisioning writes the ROM through the `prov_*` port only while
`prov_mode` is high. In the field that pin is tied low, and the port then
has no effect.

## Protocol (prover side)

1. The verifier sends n1 (32 bytes).
2. The prover computes h1 = HMAC(K, n1), T = SHA256(chip info) ⊕ n1 and
   n2 = HMAC(K, T), then sends A = h1 ‖ n2 (64 bytes).
3. The verifier sends B = HMAC(K1, n2), where K1 = h1 ⊕ n1 ⊕ n2.
4. The prover recomputes B. It sends C = 01h if B matches and 00h if not.
   A failed authentication ends the session.
5. The verifier sends F ‖ S ‖ L (1 + 4 + 4 bytes):
   * with F = 0, the prover sends R = HMAC(K, flash[S .. S+L)), which is RA;
   * with F = 1, the prover runs a full secure boot with repair and sends
     R = {boot_ok, frames repaired, 30 zero bytes}.

   During that boot `core_fetch_enable` is low, so the processor is held as if
   in reset until every frame has passed again.

## Timing

All figures are at 100 MHz with the default sizes.

| operation | cycles |
|---|---|
| one SHA-256 block | 66 |
| HMAC of 256 bytes (with the key already loaded) | about 795 |
| SPI byte (CLK_DIV = 1) | 17 |
| flash read byte, handed to the CA unit (SPI byte + hand-off, no read-ahead) | about 20 |
| verify one clean frame (1064 bytes read and hashed on the fly) | about 21,300 |
| power-on boot, six clean frames | 127,693 |
| power-on boot, six frames, one repaired (flash model with short program/erase times) | 169,305 |

For comparison, the original crypto-core figure for 256 bytes is 2926
cycles, and its secure bootstrap took 709,873 cycles for six frames. Those
figures include software on the processor.

## Where this design departs from the original

* **Resilience Engine and protocol in hardware.** The original ran both in C
  on the Ibex core. Here they are finite-state machines, so the processor is
  outside the trusted base.
* **Recovery data per frame.** The original quotes 968 bytes of recovery data
  per 1 KB frame and about 5 KB of ROM for a 5.6 KB application. This design
  keeps a full 1064-byte record per frame, 6 × 1064 + 64 = 6448 bytes of ROM
  for six frames. No compression is used.
* **Frame placement** (one record per 4 KB sector), the record header
  layout, the big-endian encodings, the key length (256 bits), the R format of
  a boot and the F/S/L encoding are this design's choices. The original does
  not fix them.
* **One retry.** A frame that still fails after its repair halts the boot.
  The original also says to repair and then halt, but not how many retries to
  allow.
* **Flash timing.** The testbench flash model programs a page in 300 ns and
  erases a sector in 2 µs, so simulations stay short. Real parts take
  milliseconds, and the boot time then grows by that time for each repaired
  frame.

## Not built here

These parts are outside the synthesizable design and meet it at the top's
ports:

* the Ibex RISC-V core;
* its PMP and SRAM. The top provides `core_fetch_enable`, `pmp_lock_mask`
  and `pmp_lock_base`;
* the vector interrupt controller;
* the SPI flash chip, which exists only as a behavioural model for
  simulation (`tb/spi_flash_model.sv`);
* the verifier, which the end-to-end testbench plays.

## Tool notes

* Verilator reports `SYNCASYNCNET` on `rst_n`. The reset is asynchronous in
  every register, and the only other use is the `disable iff (!rst_n)` of
  the concurrent assertions. That use is a simulation check, not a circuit
  path.
* The `UNUSEDSIGNAL` reports cover status bits that are kept for
  observability, such as `frame_off` and `recovered`, and the unused bit at
  the end of each shift register. Each module's opening comment names them.

## Simulation

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
  rtl/sracare_pkg.sv tb/sha_ref_pkg.sv tb/frame_gen_pkg.sv \
  tb/tb_sracare_top.sv --top-module tb_sracare_top
./obj_dir/Vtb_sracare_top
```

`tb_sracare_top` uses the top at its default sizes and plays the verifier
through the whole sequence:

1. provisioning;
2. a power-on boot with one corrupted frame repaired;
3. an authenticated RA session;
4. a runtime attack followed by a verifier-ordered boot that repairs three
   frames;
5. a session with a wrong B;
6. a write-protected flash that makes the boot halt;
7. a boot that succeeds once the protection is lifted;
8. a reset and a timed power-on boot of the clean six-frame image.

It counts each mechanism along the way and checks the counts.
