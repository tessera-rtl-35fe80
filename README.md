# Tessera: inline cache-line decryption of NPU weights — RTL

On a unified-memory SoC the CPU and the NPU share one DRAM, so any weights
the NPU reads in plaintext can also be read by a compromised kernel, by a
rogue DMA master, or with a probe on the DRAM bus. Tessera keeps the weights
encrypted in DRAM (AES-256 in counter mode) and decrypts them on the way in,
64 bytes at a time, in an Inline Crypto Engine (ICE) that sits between the
NPU's DMA and the DRAM controller. Plaintext exists only in the NPU's on-chip
SRAM, behind a stream-ID firewall, and only for as long as the tile is in use.

The trick that makes this nearly free is the counter. Each 64-byte line's
keystream depends only on the session key, a per-model nonce and the line's
physical address:

    CTR(P) = IV_base (96 bit) || floor(P / 64) (32 bit)

so the keystream can be computed as soon as the read *request* is seen, while
the DRAM is still fetching the ciphertext. DRAM takes tens of nanoseconds;
a pipelined AES core takes 15 cycles here. By the time the data comes back,
its keystream is waiting and the only added cost is one XOR cycle.

This repository holds synthesizable SystemVerilog for that datapath and its
safety mechanisms: the ICE (counter unit, pipelined AES-256, keystream
buffer, XOR stage, key registers), a tile DMA controller, the isolated
plaintext SRAM, a hardware scrub engine and preemption hook, and the
stream-ID/tag firewall. Each block has a self-checking testbench, and one
testbench runs the whole design at full size.

## Block diagram

```
             tile cmd                     SRAM reads (CPU, DMA masters, NPU compute)
                |                                          |
           +----v----+  line req  +----------------------+ |  +---------------+
           | npu_dma |----------->|         ice          | +->| smmu_firewall |
           +----^----+            |  ice_key_regs <------+----  (stream ID,  |
         stop/  |  line_done      |  ice_ctr_gen         |    |  tag, range)  |
        restart |                 |  aes256_pipe (14 st) |    +-------+-------+
           +----+--------+        |  ice_ks_buffer (4 KB)|            | read port
           | preempt_ctrl|        |  ice_xor_stage       |  write +---v------+
           +--+------+---+        +--+-------------^-----+------->| npu_sram |
  key_clear   |      | scrub_start   | AXI AR      | AXI R        |  2 MB,   |
  (to ice) <--+  +---v--------+      v             |              |  8 banks |
                 | sram_scrub |-- zero row ------------------------>          |
                 +------------+   DRAM controller (outside)        +----------+
  key bus (prov_*) from the secure enclave (outside) --> ice_key_regs
```

`tessera_top` wires these together. The DRAM controller, the secure enclave
that unwraps the key, the host CPU and the NPU compute units are outside the
design; their connections are ports of the top.

## How one 64-byte line is decrypted

The data path is 128 bits wide: a line is an AXI INCR burst of four 16-byte
beats (ARLEN = 3, ARSIZE = 4), and each beat is exactly one AES block.

| cycle | what happens |
|-------|--------------|
| t     | `ice` accepts the line request (key loaded, a keystream slot free, AXI address register free). It allocates slot *s*, registers the AXI read with ARID = *s*, and hands address and slot to the counter unit. |
| t+1   | `ice_ctr_gen` outputs CTR(P). `ARVALID` is high towards DRAM. |
| t+1 .. t+4 | One AES input block per cycle, j = 0..3 (see next section). |
| t+15 .. t+18 | `aes256_pipe` (14 stages, one round each) delivers the four keystream blocks into slot *s* of `ice_ks_buffer`. |
| DRAM latency later | Beats with RID = *s* arrive. `RREADY` is high only if that beat's keystream block is present; otherwise the beat waits and `ks_stall` pulses. |
| beat + 1 | `ice_xor_stage` writes plaintext into the SRAM line given with the request, with the restricted tag. After the fourth beat `line_done` pulses and slot *s* is freed. |

The AES pipeline never stalls: a slot is reserved before any block enters it,
so the keystream always has a place to go. In steady state a new line is
accepted every four cycles, so the engine moves one 16-byte beat per cycle:
22.4 GB/s at 1.4 GHz, which is the DDR5-4800 peak the architecture targets.

## The counter of each 16-byte block

The architecture defines one 128-bit counter per 64-byte line but a line
holds four AES blocks, and they must not share a keystream. This design
gives block j (0..3) of the line the input

    AES input = { IV_base ^ j (96 bit), P[37:6] (32 bit) }

that is, j is XORed into the two lowest bits of the nonce (bits 33:32 of the
AES input) and the 32-bit line index is left intact. All (line, j) pairs of a
model get different counters; two models should use nonces that differ in
more than their two lowest bits.

Byte order, which matters for anyone producing the encrypted weights in
software: an AES block is MSB-first (byte 0 in bits 127:120, as in FIPS-197),
an AXI beat is little-endian (byte lane k in bits 8k+7:8k), and keystream
byte k is XORed into byte lane k. Encrypting the weight blob therefore is:
for each 16-byte chunk at physical address A, with line address
P = A & ~63 and j = (A >> 4) & 3, XOR the chunk's bytes, in memory order,
with AES-256(k_msk, counter above) taken as a byte string. The function
`ref_ks_beat` in `tb/aes_ref_pkg.sv` is exactly this.

Physical addresses are 40 bits; the line index is bits 37:6, so counters are
unique for blobs up to 2^32 × 64 B = 256 GiB and wrap above that.

## Keystream buffer and out-of-order DRAM

The architecture asks for a 4 KB keystream FIFO. A strict FIFO would pair
keystream with the wrong line as soon as the memory controller returns reads
out of order, which NPU traffic does. Here the 4 KB is organised as 64 slots
of one line each, and the slot number is the AXI read ID. The returning RID
picks the slot, a 2-bit counter per slot picks the beat, and a present bit
per block says whether the keystream is already there. Bursts from different
IDs may be interleaved beat by beat.

64 slots also bound the number of lines in flight. With DRAM latency above
about 256 cycles (64 lines × 4 cycles) the slots run out, new requests wait,
and `slot_stall` pulses. The architecture's jitter study saw at most 58 lines
in flight, under this bound.

## Stalls and rate

Three things can hold the stream up, each visible on a status output of the
top:

* `key_stall`: a request arrives before the enclave has loaded the key (or
  after it was cleared). Nothing is sent to DRAM.
* `slot_stall`: all 64 keystream slots are in use.
* `ks_stall`: ciphertext arrives before its keystream (DRAM latency shorter
  than the 15-cycle keystream latency). The beat is held with RREADY low.

In the full-size testbench, a 32 KB tile against a DRAM with 40–90 cycles of
random, reordering latency sustains 0.988–0.993 beats per cycle from first
to last plaintext beat, depending on the random latency draw. The architecture's own estimate is 128/130 ≈ 98.5%.

`tb_workload_jitter` repeats the architecture's robustness study on the RTL.
For each platform it draws every DRAM read's latency from a normal
distribution: the platform's measured mean DRAM latency, with a 20% standard
deviation, in cycles of a 1.4 GHz clock. It then streams 6144 lines through
the whole design:

| platform | DRAM latency (cycles) | keystream-late stalls | peak lines in flight | beats/cycle within a tile |
|----------|----------------------:|----------------------:|---------------------:|--------------------------:|
| i9-12900H, DDR5-4800 | 100 ± 20 | 0 of 24576 | 32 | 0.981 |
| Jetson AGX Xavier, LPDDR4x | 60 ± 12 | 0 of 24576 | 21 | 0.990 |
| Jetson AGX Orin, LPDDR5X | 54 ± 11 | 0 of 24576 | 20 | 0.990 |

Between two tiles the stream pauses for about one DRAM latency, because
`npu_dma` starts a tile only after the previous one has completed. Counted
over the whole run, including these pauses, the rate is 0.945–0.967 beats
per cycle.

## Tile fetches and traffic

`npu_dma` takes a tile as (source address, size in bytes, first SRAM line)
and requests exactly the lines the tile touches, floor(src/64) through
floor((src+T−1)/64), with no prefetch. An aligned tile of T bytes therefore
costs ceil(T/64) × 64 bytes of DRAM traffic; an unaligned one at most one
extra line. Measured in the top testbench, for the tile sizes of common
layer types:

| layer type (tile) | DRAM bytes | amplification | 4 KB-page scheme |
|-------------------|-----------:|--------------:|-----------------:|
| batch norm, 128 B | 128  | 1.00 | 32 |
| depth-wise 3×3, 288 B | 320 | 1.11 | 15 |
| point-wise narrow, 512 B | 512 | 1.00 | 8 |
| 3×3 conv mid, 1 KB | 1024 | 1.00 | 4 |
| point-wise wide, 2 KB | 2048 | 1.00 | 2 |
| 4 KB and up | 4096 | 1.00 | 1 |

## Preemption: drain, scrub, clear

If the OS preempts the NPU mid-inference, plaintext weights must not survive
into the next context. `preempt_ctrl` runs a fixed sequence that software
cannot shorten:

1. `dma_stop`: the DMA issues no new line requests.
2. Drain: wait until the DMA has no line outstanding and the ICE is empty.
3. `scrub_start`: `sram_scrub` zero-fills the SRAM, one row of all eight
   banks (512 B) per cycle, and clears the tags. For 2 MB that is 4096
   cycles (4.1 µs at 1 GHz).
4. `key_clear`: key, nonce and round keys are zeroed.
5. `preempt_ack` rises: the OS may switch context.

On `resume`, the controller waits until the enclave has provisioned the key
again, then pulses `dma_restart`. The DMA refetches the interrupted tile
from its first line. In the full-size test the whole sequence, request to
acknowledge, took 4182 cycles, of which 4096 were the scrub.

The scrub time is SRAM_BYTES / (BANKS × 64 B) cycles, so the SRAM size and
bank count set it. `tb_workload_preempt` runs the hook on three
configurations of the top, each with the clock at which its bank count gives
the platform's SRAM bandwidth. The time adds 1.5 µs for state save, which is
software and outside this design:

| configuration | SRAM_BYTES, BANKS | clock | cycles (scrub) | scrub + 1.5 µs | architecture's estimate |
|---------------|-------------------|------:|---------------:|---------------:|------------------------:|
| i9-12900H iGPU L2, 512 GB/s | 2 MB, 8 | 1.0 GHz | 4194 (4096) | 5.60 µs | 5.4 µs |
| Jetson AGX Xavier DLA, 480 GB/s | 4 MB, 8 | 0.9375 GHz | 8286 (8192) | 10.24 µs | 9.8 µs |
| Jetson AGX Orin DLA, 960 GB/s | 4 MB, 16 | 0.9375 GHz | 4189 (4096) | 5.87 µs | 5.7 µs |

The 3–5% difference comes from units: the estimate counts a megabyte as
10^6 bytes, while these SRAMs hold 2^20 bytes per megabyte. The drain before
the scrub adds another 80–100 cycles.

## The firewall

All reads of the plaintext SRAM from outside the ICE go through
`smmu_firewall`, which stands in for the SMMU stream-ID rule the
architecture relies on. One access per cycle, answered one cycle later:

* address beyond the SRAM: DECERR;
* stream ID other than the NPU's: SLVERR, zero data, the SRAM is not read;
* a line whose stored tag is non-zero and differs from the access tag:
  SLVERR, zero data (the ICE writes every plaintext line with tag `PLAIN_TAG`,
  4'hA by default; scrubbed lines have tag 0);
* otherwise OKAY with the data.

The NPU stream ID (`NPU_SID`, 8'h10 at reset) can only be changed by a
secure-world write (`cfg_ns` = 0). A non-secure write is refused and pulses
`cfg_err`. Page tables and address translation are not modelled.

## Modules and parameters

| file | role | main parameters (default) |
|------|------|---------------------------|
| `rtl/tessera_pkg.sv` | sizes, types, AES round functions, S-box generated at elaboration | line 64 B, beat 16 B, key 256, nonce 96, index 32, address 40 |
| `rtl/aes256_pipe.sv` | 14-stage AES-256 encryptor with side tag | `TAG_W` |
| `rtl/ice_key_regs.sv` | key/nonce registers, key expansion, clear | — |
| `rtl/ice_ctr_gen.sv` | CTR(P), one registered cycle | `TAG_W` |
| `rtl/ice_ks_buffer.sv` | 64-slot keystream buffer | `SLOTS` (64) |
| `rtl/ice_xor_stage.sv` | XOR and lane mapping, 1 cycle | `LADDR_W` |
| `rtl/ice.sv` | the inline crypto engine | `SLOTS`, `LADDR_W`, `PLAIN_TAG` |
| `rtl/npu_dma.sv` | tile to line requests, stop/restart | `LADDR_W` |
| `rtl/npu_sram.sv` | banked plaintext SRAM with line tags | `SRAM_BYTES` (2 MB), `BANKS` (8) |
| `rtl/sram_scrub.sv` | row-by-row zero-fill | `ROWS` (4096) |
| `rtl/smmu_firewall.sv` | stream-ID, tag and range check | `SRAM_BYTES`, `NPU_SID` |
| `rtl/preempt_ctrl.sv` | preemption sequence | — |
| `rtl/tessera_top.sv` | everything above | `SLOTS`, `SRAM_BYTES`, `BANKS`, `NPU_SID`, `PLAIN_TAG` |

For a 4 MB SRAM (the size of the two Jetson platforms the architecture was
sized against) set `SRAM_BYTES = 4194304`; the scrub then takes 8192 cycles.
More banks make the scrub faster at the cost of wider memories. The memories
are written as arrays: for silicon, `npu_sram`'s banks and the keystream
buffer would be replaced with SRAM macros.

All state that is read is reset (asynchronous, active low), except the
memory arrays and the AES pipeline registers, whose contents are qualified
by valid bits.

## Simulation

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tessera_pkg.sv tb/aes_ref_pkg.sv tb/tb_tessera_top.sv \
    --top-module tb_tessera_top -o sim
./obj_dir/sim
```

Replace `tb_tessera_top` with any other testbench in `tb/`. The
full-size end-to-end run takes about 15 seconds.

| testbench | what it shows |
|-----------|---------------|
| `tb_aes256_pipe` | FIPS-197 AES-256 vector; random keys and blocks against an independent reference; latency exactly 14 cycles at one block per cycle |
| `tb_ice_key_regs` | FIPS-197 round keys 0, 1, 2, 14; clear zeroes everything and beats a simultaneous write |
| `tb_ice_ctr_gen` | CTR(P) for random addresses, one-cycle latency, hold under back-pressure |
| `tb_ice_ks_buffer` | lowest-free allocation of all 64 slots, readback, free and reuse |
| `tb_ice_xor_stage` | XOR and byte-lane mapping, one-cycle latency |
| `tb_ice` | 300 lines against a DRAM model with 2–400 cycles of reordering latency; every plaintext beat, T_XOR = 1, AXI fields; all three stall causes and out-of-order return observed |
| `tb_npu_dma` | line counts for aligned and unaligned tiles of the layer sizes above, stop, restart from the tile start, zero-byte tile |
| `tb_npu_sram` | 2 MB memory: writes in all banks, partial-line writes, row scrub beats a simultaneous write |
| `tb_sram_scrub` | all 4096 rows, once each, done after 4096 cycles |
| `tb_smmu_firewall` | OKAY / SLVERR / DECERR cases, tag rule, secure-only configuration |
| `tb_preempt_ctrl` | the order stop → drain → scrub → clear → ack → key → restart |
| `tb_workload_preempt` | preemption on 2 MB / 8 banks, 4 MB / 8 banks and 4 MB / 16 banks: hook time, every row scrubbed once, SRAM zero, key gone, refetched tile correct |
| `tb_workload_jitter` | three platforms' DRAM latency with 20% jitter, 6144 lines each: stall rate, occupancy, rate, every plaintext beat |
| `tb_tessera_top` | whole design at default size: DRAM holds no plaintext beat, key stall, the layer tiles and traffic, 32 KB rate, short- and long-latency phases, preemption with full-SRAM zero check and refetch, firewall refusals, and a ciphertext line remapped to another address that no longer decrypts |

The reference AES in `tb/aes_ref_pkg.sv` is written separately from the RTL
(byte arrays, S-box found by search) and is itself checked against the
FIPS-197 vector. `tb/dram_model.sv` is a behavioural AXI read slave with
random latency, optional reordering and RVALID gaps; its latency can be
changed at run time.

## Where this RTL goes beyond, or departs from, the architecture

Taken from the architecture: the counter formula and its one-cycle stage;
AES-256 with a fully pipelined core (T_ks = R cycles); the one-cycle XOR; a
4 KB keystream store; line-granularity fetch with no prefetch; key
provisioning into ICE registers and clearing on preemption; the preemption
order (stop, drain, zero-fill, clear key, let the OS proceed; on resume
re-key and restart from the tile boundary); stream-ID isolation with a bus
abort; a restricted tag on plaintext; secure-only firewall configuration;
a 2 MB SRAM scrubbed at 512 B per cycle.

Choices made here, where the architecture is silent or loose:

* the 128-bit bus and the per-block counter variation (above);
* 64-byte bursts (the architecture also mentions 128-transfer bursts when
  estimating overhead; those would not be line-granular);
* a slot-indexed keystream store instead of a strict FIFO;
* a simple SRAM write port instead of a full AXI write channel, and a
  valid/ready line-request port from the DMA instead of an AXI slave read
  channel on the ICE;
* a DMA that handles one tile at a time (no overlap between tiles);
* the tile command format, the firewall's SLVERR/DECERR split and tag rule,
  the reset stream ID and tag value, and all handshake signals;
* banking of the SRAM to reach the scrub bandwidth;
* a DRAM read error is flagged on `rd_err` but the data is still written.

Not built: the secure enclave (RSA-OAEP unwrap of the key blob, application
hash check, eFuse key store), the DRAM controller and PHY, the host CPU, and
the full SMMU. Their interfaces are ports of `tessera_top`. Also not built,
because the architecture leaves them to future work: integrity protection
(MACs or an integrity tree), per-layer key rotation, masked AES S-boxes and
traffic shaping.

## Trust and limits

The testbenches cover functional behaviour and cycle timing in simulation
only. Nothing here has been through timing closure or gate-level simulation.
The AES round is a single cycle of SubBytes, ShiftRows, MixColumns and
AddRoundKey; meeting 1.4 GHz would take more stages per round, which would
lengthen T_ks without changing anything else, since the keystream store
absorbs any latency shorter than DRAM's. AES-CTR alone gives no integrity:
an attacker who can write DRAM can flip plaintext bits undetected.
