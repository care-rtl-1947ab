# CARE: a secure-boot and onboard-recovery unit for a small RISC-V SoC

A small RISC-V system boots its application from an external SPI NOR
flash. Anyone who can reach that flash, whether with a programmer on the
board, through a debug port, or by a DMA transfer from a compromised
peripheral, can change the image. CARE (Code Authentication and Resilience
Engine) sits between the boot flash and the processor core. It keeps the
core in reset until every part of the image has been checked. When a part
fails the check, CARE does not just stop: it rewrites that part of the
flash from a trusted copy held in on-chip secure storage, checks it again,
and only then lets the core run. One HMAC-SHA256 core does all the
cryptography: the integrity hash, the authenticity signature, the key
derivation, and the re-signing of a recovered frame.

This RTL contains CARE and the trusted parts around it:

- the secure ROM;
- the SPI flash controller;
- a PMP-style access checker;
- the GPIO boot trigger;
- a reduced TileLink-UL style host port.

The processor core, SRAM and the flash chip stay outside and connect
through the ports of the top module, `care_soc`.

## 1. The image: 1 KB frames

The application image is cut into frames of 1024 bytes. Each frame is
self-describing:

| Bytes     | Field        | Content                                                        |
|-----------|--------------|----------------------------------------------------------------|
| 0..31     | Hash         | HMAC-SHA256(dkey, SHA-256(bytes 32..1023)), first byte first   |
| 32..35    | Frame number | index of the frame, little-endian                              |
| 36..39    | Frame offset | byte offset of the frame in the image (number × 1024), LE      |
| 40..55    | reserved     | zero                                                           |
| 56..1023  | Payload      | 968 bytes of the application                                   |

The reference application is 5.6 KB, so it takes six frames. They sit at
flash addresses 0, 1024, … 5120.

The Hash field cannot cover itself. Both digests therefore cover bytes
32..1023, which are the header fields that follow the Hash plus the
payload. The order and width of the header fields, and the 16 reserved
bytes, are this design's choices: only the 1 KB frame and the 968-byte
payload are fixed.

Because the number and offset fields are inside the hashed range, a valid
frame copied into the wrong slot fails the integrity check of that slot:
each slot has its own golden digest. CARE never trusts these fields to find
a frame. It takes the position from its own frame counter, both when
reading and when re-flashing.

## 2. Secure storage map

`secure_rom` is 18,432 bytes: a 12 KB boot-code area and a 6 KB CARE area.
It is written only through a provisioning port. That port closes for good,
until the next reset, when CARE pulses `lock_set` at the start of every
boot. Words are little-endian: byte address `a` is bits
`8*(a%4) +: 8` of word `a/4`.

| Byte address | Size     | Content                                         |
|--------------|----------|-------------------------------------------------|
| 0            | 12288    | first-stage boot code (opaque to CARE)          |
| 12288        | 4        | vendor ID                                       |
| 12292        | 16       | device UUID                                     |
| 12308        | 4        | firmware revision                               |
| 12312        | 32       | shared key K                                    |
| 12352        | 6 × 32   | golden digest of each frame, SHA-256(bytes 32..1023) |
| 12544        | 6 × 968  | recovery payload of each frame                  |

The CARE area holds 6064 of its 6144 bytes.

Only the payload of each frame is stored for recovery. The recovery engine
rebuilds the 56-byte header itself:

- the number and offset fields come from the frame index;
- the Hash field is recomputed by signing the stored golden digest with the
  derived key.

This is how 968 bytes of recovery data per 1 KB frame are enough.

## 3. Boot and recovery flow (`care`)

`care` is a state machine. After reset, and while the provisioning strap
`prov_mode` is low, it runs as follows.

1. **Lock.**
   - Pulse the ROM lock.
   - Write the four access-control entries, all locked (section 6).
2. **Chip information.**
   - Read vendor ID, UUID, firmware revision and K from the ROM (port A, one
     word per clock).
3. **Key derivation.**
   - `dkey = HMAC-SHA256(K, UUID)` on the CA unit.
   - The derived key never leaves the CA unit.
4. **Bootstrap.** For frame i = 0..5:
   - read the golden digest (8 words);
   - stream the frame from flash through the CA unit, which computes
     - `I` = (SHA-256 of bytes 32..1023 equals the golden digest),
     - `S` = (HMAC(dkey, that digest) equals the frame's Hash field);
   - update the chain-of-trust bit: `V(0) = 1`, `V(i+1) = V(i) & S & I`;
   - if the frame passed both checks, go to the next frame;
   - if it failed, run the resilience engine on it (section 4), rewrite the
     access-control entries, and check the frame again;
   - if it fails a second time, stop: `boot_fail` is set and the core stays
     held.
5. **Run.**
   - Raise `core_fetch_en` and `boot_done`.
   - Give the flash controller to the host port.

A rising edge on GPIO pin 7 (`boot_trig`) starts step 4 again at any time
in the run or fail state:

- the status bits clear at once;
- the core is held again until the new bootstrap has passed.

A host flash access that is in flight when the trigger arrives is finished
first.

Counters for checked frames, detected failures, recovered frames and the
last bad frame are exported as status.

**Timing at the default parameters** (100 MHz clock, SPI clock = clk/4,
flash model below):

| Operation                                      | Clocks          |
|------------------------------------------------|-----------------|
| power-on boot, six clean frames                | about 229,000   |
| bootstrap with one frame re-flashed            | about 305,000   |
| one 256-byte HMAC on `hmac_sha256`             | about 1,130     |

Most of the time goes to the SPI transfer: 33 clocks per byte. The
compression rounds (one per clock, 64 per block) take far less.

These figures come from a behavioural flash with short, fixed erase and
program times. A real SPI NOR part needs tens of milliseconds to erase a
sector, and that would dominate the recovery time.

## 4. Resilience engine (`resilience_engine`)

Given a frame index, the engine:

1. Reads the frame's golden digest from the ROM.
2. Asks the CA unit for `HMAC(dkey, golden)`. This is the frame's Hash
   field. The CA unit is idle at that point, so sharing it costs nothing.
3. Erases the frame's flash sector (write enable, sector erase, then status
   polling until the busy bit clears).
4. Programs the frame as four 256-byte pages, each preceded by a write
   enable and followed by polling:
   - the Hash;
   - number and offset;
   - 16 zero bytes;
   - the 968 recovery bytes, read from the ROM one word at a time.

Only the failed frame is touched.

`bytes_restored` reports how many payload bytes were written, for the
status counters. The flash is assumed to erase in 1 KB sectors, one frame
per sector. With the usual 4 KB-sector parts, the engine would have to
save and rewrite the three neighbouring frames of the sector.

## 5. One crypto core, three uses (`ca_unit`, `hmac_sha256`)

`hmac_sha256` wraps a byte-serial SHA-256 engine:

- `sha256_engine` collects 64-byte blocks and adds the padding and length
  in hardware;
- `sha256_core` runs one compression round per clock.

With `hmac_en = 1`, the wrapper computes:

- the inner hash over `key ⊕ ipad` followed by the message;
- the outer hash over `key ⊕ opad` followed by the inner digest.

The key is 256 bits, zero-extended to the 64-byte block.

`ca_unit` puts the three CARE operations on that single core:

- `CA_DERIVE`: `dkey = HMAC(K, UUID)`. The result is kept inside the unit.
- `CA_VERIFY`: takes a frame as a byte stream. It:
  - captures the Hash field, number and offset;
  - hashes bytes 32..1023;
  - compares the result with `golden`, giving `integ_ok`;
  - signs the digest under `dkey` and compares with the captured Hash,
    giving `auth_ok`.
  - `frame_ok` is the AND of the two.
- `CA_SIGN`: `HMAC(dkey, sign_msg)`, used by the resilience engine.

Because integrity and authenticity are separate bits, the design can tell
the two failure kinds apart:

- a frame whose payload was changed fails both checks;
- a frame whose payload matches the golden digest but whose Hash field was
  forged, or was signed for another device, fails only authenticity.

## 6. Access control (`pmp_checker`, `bus_xbar`)

The paper relies on the RISC-V core's PMP to keep software away from the
secrets and the flash. Since the core is outside this RTL, an equivalent
check sits on the host port. The checker has four entries, each
`[base, top)` with r/w/x bits and a lock bit. The first matching entry
decides, and an address that matches no entry is refused. A locked entry
ignores writes until reset. CARE's rewrite of the entries after a recovery
therefore only confirms that they are still in force.

| Entry | Range                      | Rights | Protects                        |
|-------|----------------------------|--------|---------------------------------|
| 0     | ROM 0x8000+12288 … +18432  | none   | key, digests, recovery data     |
| 1     | ROM 0x8000 … +12288        | r-x    | boot code                       |
| 2     | flash 0x2000_0000 … +8 KB  | r-x    | boot image (no host writes)     |
| 3     | status 0x4000_0000 … +20   | r--    | CARE status words               |

`bus_xbar` decodes the host requests (`tl_h2d_t` / `tl_d2h_t`: a single
outstanding word access, `a_instr` marks an instruction fetch). It checks
each request against the entries before any target sees it. A refused
request reaches no target and is answered with `d_error = 1`.

Host flash reads and writes go through the same flash controller as CARE,
but only while CARE does not own it (`fc_own`).

The status words at 0x4000_0000 are:

| Word | Content                                                                                   |
|------|-------------------------------------------------------------------------------------------|
| 0    | bit 0 core_fetch_en, 1 V, 2 boot_done, 3 boot_fail, 4 I, 5 S, 6 ROM locked, 7 checker locked |
| 1    | frames checked, detections, recoveries, last bad frame (one byte each, low to high)      |
| 2    | vendor ID                                                                                 |
| 3    | GPIO inputs                                                                               |
| 4    | firmware revision                                                                         |

## 7. Flash path (`flash_ctrl`, `spi_master`)

`spi_master` moves one byte per request in SPI mode 0, MSB first, with
SCLK = clk / (2·CLK_DIV).

`flash_ctrl` turns read, program and erase requests into standard SPI NOR
commands:

| Command | Code |
|---------|------|
| read    | 03h  |
| write enable | 06h |
| page program | 02h |
| sector erase | 20h |
| read status  | 05h |

Each command uses a 3-byte address, and program and erase end by polling
the write-in-progress bit. Read data and program data are byte streams
with valid/ready handshakes. The chip select stays high for `CS_GAP`
clocks between commands.

## 8. Top module (`care_soc`)

`care_soc` wires all blocks together and brings out the ports for what
lies outside:

- the provisioning port of the secure ROM, with the `prov_mode` strap;
- the SPI pins of the boot flash;
- 32 GPIO inputs (pin 7 is the boot trigger);
- the host port used by the core, debug module or DMA;
- `core_fetch_en`, which the core's reset or fetch-enable logic must obey;
- `boot_done` and `boot_fail`.

The only parameter is `SPI_CLK_DIV` (default 2).

## 9. Where this design departs from the described architecture

- **Hardware, not boot code.** The original architecture runs the boot
  loaders and the recovery engine as software on the core. Here they are
  hardware state machines. Boot code in ROM could drive the same blocks,
  but the verification flow does not depend on any software being correct.
- **ROM access.** The ROM is on-chip and read in parallel, not over SPI.
  Only the flash link is SPI.
- **Secure storage size.** The written description gives 5 KB of extra
  storage, while the memory figures show 6 KB. Six recovery payloads of
  968 bytes need 5808 bytes, so 6 KB is used.
- **First frame.** The first frame is not treated differently. The
  original notes that the first frame takes longer because its region is
  matched and cleared first.
- **Access checks.** PMP protection is modelled on the host port, not
  inside a core.
  - ECC on memories, dummy-instruction insertion and side-channel hardening
    belong to the core and are not part of this RTL.
- **Derived key.** The key derivation formula, the header layout, the ROM
  map, the address map and the retry-once policy are this design's own.
- **Timing.** Cycle counts are not comparable with FPGA measurements that
  include software and a real flash.

## 10. Simulating

All files are plain SystemVerilog. Packages must come first:

```
verilator --binary --top-module tb_care_soc -Irtl \
  rtl/care_pkg.sv rtl/sha256_core.sv rtl/sha256_engine.sv rtl/hmac_sha256.sv \
  rtl/ca_unit.sv rtl/resilience_engine.sv rtl/care.sv rtl/secure_rom.sv \
  rtl/spi_master.sv rtl/flash_ctrl.sv rtl/pmp_checker.sv rtl/gpio.sv \
  rtl/bus_xbar.sv rtl/care_soc.sv \
  tb/sha_ref_pkg.sv tb/care_tb_pkg.sv tb/care_tb_env.sv tb/spi_flash_model.sv \
  tb/tb_care_soc.sv
./obj_dir/Vtb_care_soc
```

Every block has a testbench `tb/tb_<block>.sv`. Each one compares the block
against independent reference models:

- `sha_ref_pkg`: SHA-256 and HMAC written as functions;
- `care_tb_pkg` and `care_tb_env`: frame builder, key derivation and ROM
  image;
- `spi_flash_model`: a behavioural SPI NOR flash with 1 KB sectors.

Each testbench ends with a line `TB_RESULT checks=N failures=M`.

`tb_care_soc` runs the full design at its default parameters. In one run
it:

1. provisions the ROM and holds the boot during provisioning;
2. boots a clean image;
3. corrupts a payload byte (integrity failure) and a Hash byte
   (authenticity-only failure), and checks both are recovered through
   GPIO 7;
4. copies a valid, correctly signed frame into another slot, and checks it
   is caught and repaired;
5. corrupts the recovery data so that a boot must stop;
6. exercises the host port: refused ROM and flash accesses, allowed ROM and
   flash reads, and a trigger during a host flash access.

It counts each of these events and fails if any of them never happened.
