# TMIU: a trusted memory-interface unit for secure boot from an SD card

A programmable SoC (processor plus FPGA fabric on one die) normally boots from
external non-volatile memory: an SD card or eMMC holding the boot image, the
kernel and the file system. The vendor's secure boot protects the bitstream and
the first-stage loader, but not the partition table and the rest of the
storage. Anyone with the card can then read it, change it or move it to other
hardware.

The TMIU closes that gap. It is a small block in the FPGA fabric, loaded from a
write-protected PROM at power-up, and it sits on the SD bus between the
processor's SD host controller and the card. The processor never talks to the
card directly. The unit:

* binds the card to this one device: it checks the FPGA's factory device
  identifier (57-bit device DNA) and the card's 128-bit CID against
  compiled-in reference digests;
* derives the storage key from both identifiers, so no key is stored anywhere:
  `K_AES = SHA-256(c || ID_dev || CID)`, first 128 bits;
* keeps everything on the card encrypted (AES-128). It decrypts sectors as the
  processor reads them and encrypts them as it writes;
* authenticates the MBR (partition table) and the boot image before giving the
  processor full access;
* locks the SD bus for good (until reset) when any check fails.

The RTL here is a complete, synthesizable implementation of that unit for a
4-bit SD bus in high-speed mode (50 MHz), with testbenches that boot a modelled
host from a modelled card.

## Boot stages

| stage | `stage_e` | what happens | commands forwarded to the card | LED |
|---|---|---|---|---|
| 1 | `STAGE_DEV` | DNA read over the DNA port, `SHA-256(DNA)` compared with `DEV_REF_HASH` | none | `status_led[0]` |
| 2 | `STAGE_NVM` | host initialises the card; the CID in the card's R2 answer to CMD2 is captured, `SHA-256(CID)` compared with `NVM_REF_HASH` | all but CMD17/18/24/25 | `status_led[1]` |
| 3a | `STAGE_KEY` | key derivation (one SHA-256 block), AES round-key expansion | all but CMD17/18/24/25 | – |
| 3b | `STAGE_CONTENT` | host reads the MBR and the boot image; the unit decrypts and hashes them | also CMD17/18 (reads) | `status_led[2]` |
| 4 | `STAGE_GRANTED` | full read/write access, all sectors en-/decrypted | all | `status_led[3]` |
| – | `STAGE_LOCKDOWN` | entered from 1, 2 or 3b on any mismatch; nothing passes in either direction | none | all off, `lockdown` = 1 |

The processor side needs no changes. A blocked command gets no response, so a
standard SD driver sees a timeout and retries. In this way the boot simply
waits for the unit's checks (a few hundred clocks each).

## Key derivation and identity checks (`key_generator`)

The key generator reads the DNA through a serial port: a load pulse, then 57
shifts, MSB first, which is the interface of the vendor's DNA primitive. It
then makes three passes over the shared SHA-256 core. Each message fits in
one 512-bit block, so the generator does the padding itself.

1. `SHA-256(ID_dev)`, where the DNA is zero-extended to 8 bytes. The digest is
   compared with `DEV_REF_HASH`.
2. `SHA-256(CID)`, where the CID is 16 bytes with bit 0 set as on the wire. The
   digest is compared with `NVM_REF_HASH`. The CID arrives from the command
   controller, and only after its own CRC7 has been checked.
3. `SHA-256(c || ID_dev || CID)`, where `c` is `KDF_COUNTER` as 4 bytes. The
   first 128 bits of the digest are `K_AES`.

The reference values are digests, not the identifiers themselves. An attacker
who reads the configuration image therefore learns neither the DNA nor the key.
Storing only digests is also why the key cannot be computed without the actual
chip.

The SHA core belongs to the key generator until `key_valid`, and to the sector
path after that. The two never need it at the same time.

## Command line (`nvm_cmd_controller`)

Commands are handled store-and-forward. The controller receives the host's
48-bit command completely and checks the start, transmission and end bits and
the CRC7. It then consults the stage filter above, and only then re-sends the
command to the card. The command therefore appears on the card side 49 clocks
after its first bit left the host. This costs under 1 µs per command, but it
means a command is never half-forwarded. It also means the unit knows the
command index before the card sees anything.

Card responses (48-bit, or 136-bit R2) are passed to the host one clock late,
bit for bit. The controller parses them on the side: the R2 answer to
CMD2/CMD10 carries the CID. Its own CRC7 (bits 7:1) is checked before the CID
is handed to the key generator, and a damaged CID is ignored rather than
rejected.

Forwarded sector commands (CMD17/18/24/25) and CMD12 are announced to the
sector path with their kind, their multi-block flag and the 32-bit block
address (SDHC/SDXC addressing). The index that follows CMD55 is treated as an
application command, not a sector command.

The stage register advances on the key generator's and the sector path's
status bits. Lockdown is terminal until `rst_n`.

## Sector path (`nvm_data_controller`)

This is the large block, and the timing is what matters. An SD data block is a
start nibble, 1024 data nibbles (512 bytes), one CRC16 per DAT line
(16 nibbles) and an end nibble: 1042 clocks. A card streaming a multi-block
read leaves 2 idle clocks between blocks, so one block arrives every 1044
clocks.

```
 card DAT ─► sd_dat_rx ──► rbuf (32×128) ──► aes_pipe ──► tbuf[0] / tbuf[1] ──► sd_dat_tx ─► host DAT
   (write: host DAT)   CRC16 check          11-stage,        ping-pong,  SHA-256      fresh CRC16   (write: card DAT)
                                             1 word/clk       (stage 3b only)
```

**Receive.** `sd_dat_rx` packs nibbles into 128-bit words, one per 32 clocks,
and computes the four CRC16 remainders on the fly. At the end nibble it
reports whether the block is good. It also keeps the CRC bits it received.

**Process.** A good block's 32 words go through the unrolled AES pipeline,
one per clock. Each word is decrypted for reads and encrypted for writes; the
direction is a per-word mode bit. The results go into whichever of the two
transmit buffers is free. This takes 2 + 32 + 11 = 45 clocks from the end of
reception (the testbenches measure 44). The receiver may already be taking the
next block in the meantime. That is safe because processing reads word *k* of
the receive buffer long before the receiver overwrites it: the receiver writes
only one word per 32 clocks.

**Faulty blocks.** A block whose CRC check fails is copied unencrypted and
sent on with the CRC it arrived with. The far end sees the CRC error and
repeats the transfer. This works in both directions: on a write, the card
rejects the block and leaves its receive state normally.

**Transmit.** `sd_dat_tx` sends a buffer with a freshly computed CRC16. It
needs 1043 + `GAP` clocks per block. With `GAP` = 1 the unit transmits at
exactly the card's pace, so the store-and-forward delay (~1.1 block times,
plus the hash time in stage 3b) stays constant over any number of blocks and
the line rate is kept. The full-size run measures 0.489 bytes per clock
(24.5 MB/s at 50 MHz) over a 2049-block read.

**Content authentication (stage 3b only).** While stage 3b is active, each
decrypted sector is hashed from its transmit buffer before it is released.
The sector is sent only once its hash job is done. A sector hash takes
8 × 65 = 520 clocks, half a block time, so it overlaps the reception of the
next block.

* Sector 0, the MBR, is hashed as a 512-byte message and must match
  `MBR_REF_HASH`.
* Sectors `BOOT_LBA` … `BOOT_LBA+BOOT_SECTORS-1` are the boot image. They are
  hashed as one message in ascending order, with the message length set to
  `BOOT_SECTORS × 4096` bits. The host must read them in that order, which is
  what a loader reading a file from a freshly formatted partition does. A
  sector that arrives out of order is forwarded but not hashed.
* Sector `BOOT_LBA+BOOT_SECTORS` is the token sector. Its first 32 bytes are
  `T_auth`, and they must equal the image digest.

On a mismatch the unit inverts the last byte of the sector concerned on the
wire, while the CRC is still computed over the original byte. This gives the
host a guaranteed CRC error, so the data is never accepted. At the same time
`mbr_fail` or `img_fail` is raised and the command controller enters lockdown.

**Writes (stage 4 only).** After the host's block the unit itself answers
with the CRC status token: `010` good, `101` faulty. It then holds DAT0 low
(busy) while the block is encrypted and sent to the card. The busy is
released only once the card has sent its own token and released its busy
signal. A write before stage 4 is stopped earlier, because its command is
never forwarded.

**Everything else.** Outside sector transfers, the card's DAT lines are passed
to the host one clock late. This covers R1b busy after CMD7/CMD12, SCR and
status reads, and the bus-width switch. A CMD12 or a new sector command flushes
any transfer in progress.

## Preparing a card

The card content must be made in a trusted environment with the key of the
target device:

1. Compute `K_AES = SHA-256(c || DNA || CID)[255:128]` with the same byte
   layout as above. Also compute the reference digests `SHA-256(DNA)`,
   `SHA-256(CID)` and `SHA-256(plaintext MBR)`, and compile all of them in as
   parameters.
2. Place the boot image at `BOOT_LBA`, padded to `BOOT_SECTORS` sectors. Write
   `SHA-256(image)` into the first 32 bytes of the next sector.
3. Encrypt every sector with AES-128 under `K_AES`, 16 bytes at a time, each
   independently (ECB). Byte 0 of a sector is the first byte of the first
   AES block.

The testbench package `tb/tmiu_bench.svh` does exactly this in SystemVerilog,
so it can serve as a reference implementation.

## Modules

| file | role |
|---|---|
| `tmiu_top` | top level: the three controllers, the shared SHA-256 core and its owner switch |
| `key_generator` | DNA readout, identity checks, key derivation |
| `nvm_cmd_controller` | CMD-line forwarding and filtering, CID capture, stage register, LEDs, lockdown |
| `nvm_data_controller` | sector path: buffers, AES, authentication hashing, write handshake, DAT multiplexing |
| `sd_dat_rx`, `sd_dat_tx` | one SD data block in and out, with CRC16 |
| `crc7`, `crc16_lines` | SD CRCs (x⁷+x³+1; x¹⁶+x¹²+x⁵+1 per line), initial value 0 |
| `aes_pipe`, `aes_key_expand`, `aes_pkg` | AES-128: 11-stage cipher and inverse-cipher pipeline, 10-clock key expansion; S-boxes computed at elaboration from the GF(2⁸) inverse and the affine map |
| `sha256_core`, `sha256_pkg` | SHA-256, one round per clock (65 clocks per block); constants computed at elaboration from the fractional parts of prime roots |
| `tmiu_pkg` | stages, status structs, SD command numbers |

Top-level parameters, with their default values:

| parameter | default | meaning |
|---|---|---|
| `DEV_REF_HASH` | digest of the example DNA `57'h1A2B3C4D5E6F701` | device reference |
| `NVM_REF_HASH` | digest of an example CID | card reference |
| `KDF_COUNTER` | 1 | the counter `c` of the key derivation |
| `MBR_REF_HASH` | digest of an example MBR (16 GB card, 100 MB FAT32 at sector 2048, Linux partition after it) | partition table reference |
| `BOOT_LBA` | 2048 | first sector of the boot image |
| `BOOT_SECTORS` | 2048 (1 MiB) | size of the authenticated boot image |

The reference values are examples; a real deployment compiles in its own.

Every bidirectional SD line appears at the top as a value/drive pair per side
(`*_i`/`*_drv` in, `*_o`/`*_oe` out), so the unit contains no tristates. The
pad logic belongs to the wrapper that places the unit in a device.

## Size

Generic synthesis gives 5,685 flip-flop bits, most of them in the AES
pipeline (11 stages of 128-bit state and control) and the SHA-256 core, plus
12,288 bits of buffer memory (three 512-byte sector buffers, which map to
block RAM: one third of a 36 Kb block). The published FPGA implementation of
the same unit reports 5,934 flip-flops and half a 36 Kb block RAM, so the two
are of the same size. That fits the smallest devices of a typical SoC-FPGA
family with room to spare. LUT counts from generic cells are not comparable
and are not quoted here.

## Where this design departs from, or goes beyond, the published description

* **Key derivation.** The published block diagram draws an XOR joining the
  two identifiers into the key, but the text defines a hash-based derivation.
  The hash-based one is built. The byte layout, the counter value and the
  truncation to 128 bits are choices of this design.
* **Identity checks** compare SHA-256 digests. The original only speaks of
  "reference checksums".
* **Choices not fixed by the description:**
  * AES mode: ECB per 16-byte block;
  * the boot image position and size;
  * the token-sector layout;
  * how the MBR is authenticated (a compiled-in digest);
  * the per-stage command filter;
  * store-and-forward on the command line;
  * the write handshake.
* **Per-sector hashing in operational mode is not built.** The description
  says every sector is stored with a hash that is checked on every later
  access, but not where those hashes are stored. After the grant, this unit
  therefore provides confidentiality (encryption) and card binding, but not
  per-sector integrity.
* **Not built: optional extensions** the description only mentions as
  possibilities: using the CSD register as well as the CID, and several keys
  for several partitions.
* **Processing time.** The published figure is 52 clocks per sector; this
  design takes 45.
* **Clock.** The unit runs on the SD clock. Clock switching during card
  initialisation (400 kHz identification mode) is left to the clock source.

## Simulation

All testbenches are self-checking. Each ends with
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_crc7`, `tb_crc16_lines` | standard SD examples and random data against bitwise reference CRCs |
| `tb_aes_pipe` | FIPS-197 example, random bursts in both directions with one block per clock, latency 11 |
| `tb_sha256_core` | FIPS 180-4 examples, random messages, 65 clocks per block |
| `tb_key_generator` | accepted device and card, wrong DNA, wrong CID; key against the reference |
| `tb_nvm_cmd_controller` | forwarding latency, filter per stage, CRC drop, response pass-through, CID capture, lockdown |
| `tb_nvm_data_controller` | decryption on read, faulty-block pass-through, encrypted write with tokens and busy, MBR/image authentication, last-byte corruption |
| `tb_tmiu_top` | whole unit with a 4-sector image. It counts each mechanism (granted boot, blocked commands, CRC error forwarded, encrypted write, faulty write, multi-block read, busy pass-through, the four lockdown causes) and fails if one never happened |
| `tb_tmiu_full` | whole unit at default parameters: boot through the full 2048-sector image plus token (2049 blocks), then a write and read-back; reports throughput and per-sector processing time (about 6 s of simulation) |
| `tb_tmiu_boot13mb` | a 13 MB Linux-style boot (25,391 sectors: MBR, authenticated image, token, then kernel and device tree read in stage 4); reports 530 ms at 50 MHz, 24.5 MB/s, against the card's 25 MB/s line rate (about 70 s of simulation) |

The reference models in `tb/tb_ref_pkg.sv` are written independently of the
RTL:

* SHA-256 constants in floating point;
* AES S-boxes by walking a generator of GF(2⁸);
* CRCs bit by bit.

The SD card (`sd_card_model`) and the DNA port (`dna_port_model`) are
behavioural models.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  -Irtl -Itb -y rtl -y tb \
  rtl/tmiu_pkg.sv rtl/aes_pkg.sv rtl/sha256_pkg.sv tb/tb_ref_pkg.sv \
  tb/tb_tmiu_top.sv --top-module tb_tmiu_top -Mdir obj_tmiu
./obj_tmiu/Vtb_tmiu_top
```

Replace `tb_tmiu_top` with any other testbench name to run that one.
