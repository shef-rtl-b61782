# A Shield for cloud-FPGA accelerators

A cloud FPGA runs a user's accelerator next to logic the cloud provider controls: the Shell, the host
driver and the device DRAM. None of these can be trusted with the data owner's secrets. The Shield
is a wrapper that sits between the accelerator and the Shell. To the accelerator it looks like the
Shell: an AXI4-Lite register port and an AXI4 memory port, both carrying plaintext. What leaves the
Shield is always encrypted with AES and authenticated with HMAC-SHA256 under one Data Encryption Key.

## Structure (`shield_top`)

- **Key storage** (`key_storage`) holds the Data Encryption Key. The key arrives on
  `key_load_valid/key_load_data` from the key-unwrapping step, which is not part of this RTL. Any
  change of key re-keys every engine.
- **Register interface** (`reg_interface`, with `reg_file`). The host writes a 16-byte command
  ciphertext, a 16-byte tag and a 96-bit IV, then writes CMD. The Shield checks
  `HMAC(K, {IV,0} || CT)` (first 16 bytes) and decrypts `CT ^ AES(K, {IV,0})`. The plaintext
  holds the opcode, the register index and the data, so register addresses stay hidden. A read
  command is answered with an encrypted, tagged response under a Shield-owned IV (bit 95 set). A
  command that fails its tag is refused, and `STATUS.auth_err` is set.
- **Memory interface**:
  - `burst_decoder` looks up each burst in `partition_map` and sends it to the engine set that owns
    its region. Unmapped bursts get DECERR.
  - Each `engine_set` protects one region. It uses a direct-mapped buffer (`line_buffer`) whose
    line is one chunk of `C_MEM` bytes.
  - On a miss, the engine set fetches the chunk's ciphertext and its 16-byte tag. It decrypts in
    place with AES-CTR while the HMAC runs over the ciphertext. If the tags differ, the beats are
    returned with SLVERR and `auth_err` becomes sticky.
  - A dirty line is encrypted and tagged when it is evicted or on `flush_req`. Its on-chip write
    counter (`counter_store`) is incremented first.
  - The counter enters both the IV (`IV_BASE + {ctr, chunk}`) and the MAC header. Replaying an
    old ciphertext/tag pair therefore fails.
  - Tags live at `TAG_BASE + 16*chunk`.
  - `axi_arbiter` shares the Shell's AXI4 port between the engine sets with round-robin grants per
    burst.
- **Crypto cores**:
  - `aes_core`: AES-128/256 with `SBOX_PAR` S-box lookups per cycle. Latency is
    `1 + Nr*(16/SBOX_PAR + 1)` cycles, which is 21 for AES-128 at 16x.
  - `sha256_core`: one round per cycle.
  - `hmac_sha256`: streams 16-byte words and pads on the fly.

## Defaults and departures

- **Defaults.** Two engine sets of 1 MiB each, 512-byte chunks, 16 KiB buffers, AES-128 at 16x
  and 8-bit counters. Each set gets its own IV base, so no keystream is reused.
- **Single C_MEM.** All engine sets share one chunk size. Workloads that mix chunk sizes per set
  therefore need code changes.
- **Not built.** The PMAC alternative MAC, the key-unwrapping step, secure boot and attestation
  firmware, and the Shell are not part of this RTL.
- **Limited testing.** Only the AES, HMAC, engine-set and full-Shield testbenches are block-level
  tests. The smaller blocks are exercised only through them.

## Simulation

All tests use plain Verilator, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/shield_pkg.sv tb/ref_aes_pkg.sv \
      tb/ref_sha256_pkg.sv rtl/*.sv tb/axi_mem_model.sv tb/axi_master_bfm.sv \
      tb/tb_shield_top.sv --top-module tb_shield_top

What each testbench does:

- `tb_shield_top`:
  - Runs the whole Shield at reduced sizes (128 B chunks, 2-line buffers).
  - Drives it with reference AES and HMAC models.
  - Checks register commands, the ciphertext in DRAM, read-back, tamper detection, DECERR and
    flush.
  - Checks that arbiter contention happens.
- `tb_engine_set` also checks replay rejection.
- Each testbench prints `TB_RESULT checks=N failures=M`.
