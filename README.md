# PIM-Enclave: RTL for a memory module that computes on encrypted data

A processing-in-memory (PIM) module places a small core next to each memory
bank. That core can scan the bank's data without moving it over the memory
bus, which saves bandwidth. It also means that no address pattern appears on
the bus while it works. PIM-Enclave turns such a module into a trusted
execution environment. A host enclave, the only party it trusts outside the
module, keeps its data in the banks encrypted. The PIM core decrypts the data
inside the module, computes on it and encrypts the results. While a kernel
runs, the bank can be locked against the rest of the system.

Three hardware additions make this work:

1. **AES-GCM in the DMA engine.** Data is encrypted and authenticated as it
   moves between the bank and the core's local memory. The core itself never
   spends cycles on cryptography.
2. **A bank lock.** A mask/base range check sits on the host's path into the
   bank. While the kernel runs, the host (and so an untrusted OS) cannot read
   or change the bank. It also cannot watch the contents change.
3. **Channels and a root of trust.** A command channel (MMIO registers) and a
   fixed-size parameter buffer let the host talk to a locked bank. A key
   storage holds the module's endorsement key, and a ROM holds the
   attestation and loader code. The key storage and ROM are shared by all
   banks.

This repository gives synthesizable SystemVerilog for all of that. It also
includes self-checking testbenches, among them one that runs a k-means
assignment pass on all eight banks of a full-size module.

```
                   host bus: word request, bank select, region
                                   |
  +--------------------------------+--------------------------------------+
  | pim_enclave_module             |                                      |
  |   +----------------------------v--------------------------+  x 8      |
  |   | pim_enclave (one bank)                                |           |
  |   |   REG_MEM ---> access_control ---+                    |           |
  |   |   REG_PARAM ---------------------+--> memory_bank     |           |
  |   |   REG_CMD  ---> cmd_channel      |    64 MB           |           |
  |   |                     |            |    128-bit port    |           |
  |   |                     |            |        |           |           |
  |   |   core_i/core_o ----+--- registers -- aes_dma_engine  |           |
  |   |   (PIM core bus)    |                 (aes_gcm_engine |           |
  |   |                     +-- local_memory <-> aes128_cipher|           |
  |   |                         4 MB              gf128_mul)  |           |
  |   +----------|-------------|------------------------------+           |
  |          rom port       key port  (one per bank)                      |
  |        +-----v----+   +----v---------+                                |
  |        | boot_rom |   | key_storage  |  PC-checked EK read            |
  |        +----------+   +--------------+                                |
  +-----------------------------------------------------------------------+
```

The PIM cores are not part of the RTL. Each bank's core bus (`core_i`,
`core_o`) is a port of the top module. The core can be any in-order 32-bit
processor; the evaluated system used ARM cores.

## How a confidential kernel runs

The end-to-end testbench follows this sequence. It is also the best way to
understand how the blocks are used together.

1. **Attestation.** Code in the ROM reads the endorsement key (EK) from
   `key_storage`. It uses the EK to prove the module's identity to the host
   enclave. The host then sends a session key and a data key over that
   secure channel, and the core writes them into its AES key registers. The
   attestation protocol is software and is not part of this RTL.
2. **Data placement.** The host enclave encrypts its data into blocks under
   the data key and writes them into the bank with ordinary writes. Each
   block is `IV | TAG | ciphertext`, described below.
3. **Parameters.** The host encrypts the kernel's parameters (pointers,
   sizes, initial centroids) under the session key. It writes them into the
   bank's parameter buffer.
4. **PROTECT.** The host writes the PROTECT command. The core sees it
   pending, acknowledges it, and programs the bank's access-control
   registers. From then on the host reads zeros from the protected part of
   the bank, and its writes there are discarded. The parameter buffer and the
   command channel stay reachable.
5. **EXECUTE.** The core takes the command. It then:
   - decrypts the parameter block into local memory with the session key;
   - decrypts the data blocks with the data key;
   - computes;
   - encrypts the results back into the bank;
   - clears the access control;
   - writes a status word that the host polls.

   A decryption whose tag does not match sets `auth_fail`. The kernel is
   expected to abandon the run and report an error.
6. The host reads the result blocks and opens them with the data key.

## Host interface

The host bus carries one 32-bit word per request (`host_req_t`). Each
request has a bank select and a `region`:

| region      | address field        | goes to |
|-------------|----------------------|---------|
| `REG_MEM`   | `{row[13:0], col[9:0]}` | the bank through the access control |
| `REG_PARAM` | `col[9:0]`           | the parameter buffer: the bank's row `DMA_BUF_ROW`, by default the last one; never filtered |
| `REG_CMD`   | bit 0                | offset 0: write = command, read = pending flag; offset 1: read = status word set by the kernel |

Read data is returned one cycle after the request.

A column addresses one 32-bit word. A row is therefore 4 KB, and
2^14 rows × 4 KB = 64 MB per bank.

The model does not include a DRAM command protocol or packet interface. A
real module would place this bus behind its DDR4 or HMC front end.

Commands (8-bit codes in `pim_pkg::pim_cmd_e`): `GET_TOKEN`,
`SET_SESSION_KEY`, `SET_DATA_KEY`, `OFFLOAD_KERNEL`, `EXECUTE`, `PROTECT`,
`DESTROY`. The hardware only carries the codes. Their meaning is defined by
the PIM core's firmware.

Handshake:

- A host write to offset 0 stores the command and sets `cmd_pending`.
- The core writes 1 to `R_CMD_PENDING` to clear it.
- If both happen in the same cycle, the host's new command wins. A command
  is never lost.

## PIM core interface

Core word address bits `[22:21]` select the target (`pim_pkg::core_region_e`):

| `[22:21]` | target |
|-----------|--------|
| 0 | local memory. The word address is `{beat, lane}`, and lane j is bits `[127-32j -: 32]` of a 16-byte beat. |
| 1 | registers, word offset `[7:0]` (table below) |
| 2 | shared ROM, word address |
| 3 | shared key storage, EK word 0..3; the request carries the core's PC |

All regions answer one cycle after the request, and all writes take effect
at once.

| offset | register | notes |
|--------|----------|-------|
| 0x00 | `DMA_SRC` | byte address; bank address for bank-to-local and decrypt, local address otherwise |
| 0x01 | `DMA_DST` | byte address |
| 0x02 | `DMA_SIZE` | bytes of payload, whole 16-byte beats |
| 0x03 | `DMA_CMD` | bits [2:0]: 1 bank→local, 2 local→bank, 3 decrypt bank→local, 4 encrypt local→bank; bit 4: 1 = session key, 0 = data key. Writing a valid code starts the transfer. |
| 0x04 | `DMA_STATUS` | bit 0 busy, bit 1 done, bit 2 auth_fail |
| 0x08–0x0B | `DATA_KEY` | write only (read as 0); word 0 is key bits [127:96] |
| 0x0C–0x0F | `SESSION_KEY` | write only |
| 0x10–0x12 | `COUNTER` | 96-bit IV source for encryption; word 0 is bits [95:64] |
| 0x18 / 0x19 | `AC_ROW_MASK` / `AC_ROW_BASE` | bank lock, row field |
| 0x1A / 0x1B | `AC_COL_MASK` / `AC_COL_BASE` | bank lock, column field |
| 0x20 | `CMD_PENDING` | read: pending flag; write 1: acknowledge |
| 0x21 | `CMD_VALUE` | last host command |
| 0x22 | `PIM_STATUS` | word the host reads at `REG_CMD` offset 1 |

The DMA ignores register writes while it is busy.

## The bank lock

The check applies separately to the row and column fields of each host
address. A field passes when

```
&((addr & mask) ~^ base)        i.e.  (addr & mask) == base
```

and the access is allowed when both fields pass. With mask = base = 0,
everything passes, which is the unlocked state after reset. Two examples:

- Row mask `0x2000`, base `0x2000` leaves only rows 8192..16383 open. The
  lower half of the bank is locked.
- Column mask and base `0x3FF` leave one word of every row open.

The mask selects the address bits that matter, and the base gives their
required value. The protected area is therefore the complement of an aligned
power-of-two window, or a union of such windows. This is not an arbitrary
[start, end] interval. The paper's simulator used an interval, while its
figure and text describe the mask/base gates built here.

A host request that fails the check is handled like this:

- A read returns 0. The bank is still read, so the timing does not change.
- A write is discarded. The paper's figure only gates read data, but its text
  says every access to a locked bank is dropped, so writes are discarded too.
- `host_blocked` is raised for the cycle of the request.

The parameter buffer row bypasses the check. It must stay open, or the host
could not pass parameters to a locked bank. Place protected data outside that
row.

## The encrypting DMA engine

An encrypted block in the bank is a run of 16-byte beats:

```
beat 0 : IV (96 bits) | 32 zero bits
beat 1 : GCM tag (128 bits)
beat 2.. : ciphertext, DMA_SIZE / 16 beats
```

`DMA_SRC` or `DMA_DST` points at beat 0, and `DMA_SIZE` counts only the
payload. Local memory holds the plaintext without a header.

- **Decrypt** reads the IV and tag, decrypts every beat into local memory and
  compares tags at the end. The plaintext is written *before* the tag is
  known, so software must check `auth_fail` before trusting it.
- **Encrypt** takes its IV from the `COUNTER` register, which then advances
  by one. Software that loads a fresh counter value per key never reuses an
  IV. The engine writes the IV beat, the ciphertext and finally the tag beat.
- **Plain copies** (codes 1 and 2) move beats without touching them.

The GCM is standard: 96-bit IV, J0 = IV‖1, no additional authenticated data,
and a 128-bit tag. It interoperates with any AES-128-GCM library.

### Timing

Times run from the clock edge that writes `DMA_CMD` to the edge that clears
`busy`. Here n is the number of 16-byte beats.

| transfer | cycles |
|----------|--------|
| plain copy | 2n + 2 |
| encrypt | 3n + 9 |
| decrypt | 3n + 10 |

A plain beat costs two cycles, one to read and one to write. Encryption adds
exactly one cycle per 16 bytes, which is the cost the paper assumed for its
AES-GCM accelerator. The fixed part has three pieces:

- two cycles to derive H = E(K, 0) and E(K, J0);
- the header beats;
- the final GHASH step with the lengths block.

For the block sizes of the access-time study, 512 B takes 65 busy cycles
plain and 105 decrypted, and 8192 B takes 1025 and 1545. At 300 MHz, the
clock assumed for the accelerator, an encrypted stream moves
1.6 GB/s and a plain one 2.4 GB/s.

### Inside the AES-GCM engine

- `aes128_cipher` is the whole AES-128 encryption, key expansion included, as
  one combinational function. That is what "one 128-bit block per cycle"
  means at a low clock rate.
- The S-box is not a pasted table. `aes_pkg::compute_sbox` builds it at
  elaboration from the definition: each byte's inverse in GF(2^8), then the
  affine map.
- `gf128_mul` is a full GF(2^128) multiply, used once per block for GHASH.
- The counter block of beat i is J0 + 1 + i.

The deep combinational path is the part to pipeline first for a
faster clock. A pipelined cipher would keep the one-beat-per-cycle rate at
the cost of a few cycles of latency.

## Key storage and ROM

One `key_storage` and one `boot_rom` serve all banks, each with one read port
per bank.

The key storage returns an EK word only if the requesting core's program
counter lies inside `[ATTEST_PC_LO, ATTEST_PC_HI]`, the attestation code in
ROM. Any other read returns 0 and pulses `ek_denied`. The EK parameter here
is a placeholder; a real part would be provisioned at manufacture.

The ROM is 4096 words, and its image is loaded from the hex file named by
`ROM_INIT` (empty by default). The firmware itself is ARM code and is not
provided.

## Parameters (top module defaults)

| parameter | default | meaning |
|-----------|---------|---------|
| `N_BANKS` | 8 | PIM-Enclave banks per module |
| `BANK_ROW_W`, `BANK_COL_W` | 14, 10 | row and column field widths; 2^24 words = 64 MB per bank |
| `LOCAL_AW` | 18 | local memory beats; 2^18 × 16 B = 4 MB |
| `ROM_DEPTH`, `ROM_INIT` | 4096, "" | ROM words and image file |
| `EK` | placeholder | endorsement key |
| `ATTEST_PC_LO/HI` | 0x0 / 0xFFF | PC window allowed to read the EK |

Sources:

- The bank count, the bank and local memory sizes, and the field widths come
  from the evaluated configuration.
- The register map, the region encoding, the ROM size and the PC window are
  this design's choices.

## What follows the paper and what does not

Taken from the paper:

- The parts and their connections: a PIM core per bank with local memory, an
  AES-capable DMA engine and access control in front of the bank; one shared
  ROM and key storage.
- The command set.
- The two host channels, including a fixed-size parameter buffer.
- The mask/base range check on row and column addresses, with 0/0 meaning
  "off".
- AES-GCM with the IV and tag prepended to each block.
- One block per cycle and one extra cycle per 16 bytes in the DMA.
- The sizes of the evaluated system.

Chosen here, where the paper gives no detail:

- AES-128 (the key length is never stated).
- The bank layout of the IV and tag.
- The register map.
- The command handshake.
- The parameter buffer's size (one row) and place (the last row).
- Dropping blocked writes as well as reads.
- Returning zeros for blocked reads.
- The PC-window protection of the EK.
- The counter-driven IV for encryption.
- One-cycle memories with no DRAM timing.

Not included:

- The PIM and host processors.
- Dedicated hardware for `DESTROY` (ending the session and wiping local
  memory). The core does it in firmware, by overwriting its key registers
  and local memory.
- The DRAM array and its decoders and sense amplifiers.
- The DDR4/HMC bus interface.
- All firmware: attestation, key exchange and kernel loading.

Other differences from the evaluated system:

- The evaluated system reports 2.9 GB/s encrypted against 3.53 GB/s plain,
  from its simulated memory system. Here the ratio is a fixed 3 : 2 cycles
  per beat.
- The largest evaluated dataset projection, 640 MB, does not fit one
  8 × 64 MB module. It needs two.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

- **Reference models.** The testbenches check against values worked out
  independently. `tb/gcm_model_pkg.sv` is a second AES and GCM written
  differently from the RTL: a brute-force S-box inverse and a carry-less
  multiply followed by a separate reduction. The AES and GCM tests also use
  the published FIPS-197 and GCM test vectors.
- **Cycle counts.** The DMA, GCM and bank tests check cycle counts as well
  as data.

| testbench | what it covers |
|-----------|----------------|
| `tb_aes128_cipher` | FIPS-197 and SP 800-38A vectors, random keys against the model |
| `tb_aes_gcm_engine` | GCM test cases 1–3, random messages, set-up latency, counter IV |
| `tb_aes_dma_engine` | all four transfer kinds, bank layout, cycle formulas, tampered and wrong-key blocks |
| `tb_access_control` | random masks and bases, blocked reads and writes, disable state |
| `tb_memory_bank`, `tb_local_memory` | both ports, word order, read latency, same-cycle collisions |
| `tb_cmd_channel` | handshake, simultaneous command and acknowledge, status word |
| `tb_key_storage` | PC inside and outside the window, all ports at once |
| `tb_boot_rom` | image load (`tb/boot_rom_test.hex`: word i = i·0x9E3779B1 + 0x01234567), all ports |
| `tb_pim_enclave` | one bank at reduced size: every host and core path, lock, parameter decrypt, encrypt to bank, DMA rate |
| `tb_pim_enclave_module` | full-size module, eight k-means kernels at once (below) |
| `tb_dma_block_sizes` | one full-size bank: block sizes 512–8192 B, sequential and random addresses, both directions, plain and encrypted, data and exact busy times |

### The end-to-end test

`tb_pim_enclave_module` runs one k-means assignment pass on every bank of a
module at full default size. A behavioural kernel stands in for each bank's
PIM core.

- **Data.** 127 objects × 16 features, one 8 KB encrypted block, as in the
  paper's k-means setup. Membership is one 32-bit cluster index per object,
  and there are k = 5 centroids.
- **Kernel work.** The kernels run concurrently, and the test confirms that
  several DMA engines are busy at once. Each kernel:
  - reads the EK from inside and from outside the attestation window;
  - locks its bank;
  - decrypts its parameters, objects and membership;
  - assigns each object to its nearest centroid;
  - re-encrypts the membership;
  - reports the number of changes.
- **Host checks.** While the bank is locked, the host checks that reads
  return 0, that writes leave the data unchanged, that the open rows still
  work, and that the parameter buffer answers. Afterwards it opens the
  results with the reference model and compares every cluster index with
  its own computation.
- **Tamper check.** The host of bank 7 flips one ciphertext bit, and the test
  checks that the kernel sees `auth_fail` and reports an error.
- **Mechanism counts.** The test counts how often each mechanism occurred and
  records a failure for any that never did. The mechanisms are:
  - session-key decryption, data-key decryption and encryption;
  - authentication failure;
  - blocked read and dropped write;
  - the parameter buffer used under lock;
  - the command handshake;
  - key release and key refusal;
  - concurrent DMA.
- **DMA rate.** The rate is checked from the busy times of transfers of
  different lengths.

### Running a test with Verilator

Package files come first. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/pim_pkg.sv rtl/aes_pkg.sv tb/gcm_model_pkg.sv \
  rtl/aes128_cipher.sv rtl/gf128_mul.sv rtl/aes_gcm_engine.sv rtl/aes_dma_engine.sv \
  rtl/range_check.sv rtl/access_control.sv rtl/memory_bank.sv rtl/local_memory.sv \
  rtl/cmd_channel.sv rtl/key_storage.sv rtl/boot_rom.sv rtl/pim_enclave.sv \
  rtl/pim_enclave_module.sv tb/tb_pim_enclave_module.sv \
  --top-module tb_pim_enclave_module -o sim
./obj_dir/sim
```

About Verilator's warnings:

- The design lints without circuit warnings.
- The remaining notes are unused bits of the shared buses and an
  always-true `pc >= ATTEST_PC_LO` comparison when the window starts at 0.
  That comparison is kept so that a non-zero base also works.

The full-size end-to-end test allocates about 550 MB for the memories and
runs in a few seconds.
