# SeDA protection unit: encrypted and authenticated off-chip memory for a DNN accelerator

A DNN accelerator keeps weights and feature maps in off-chip DRAM. If someone can read
or change that DRAM, or the bus to it, they can copy the model or tamper with it. The
usual defence encrypts every block with AES in counter mode and tags it with a message
authentication code (MAC). That costs two things. First, one AES engine encrypts only
16 bytes per call, so matching the accelerator's memory bandwidth takes many engines.
Second, every block's MAC, plus version numbers and tree nodes, must be fetched from
DRAM too, which adds 12 % or more to memory traffic.

SeDA tackles both costs:

* **Bandwidth-aware encryption.** One AES call per data block makes one pad. Each
  128-bit segment of the block then gets its own pad: the shared pad XORed with a
  different round key, which the key expansion already holds. So a wide block costs
  one AES engine plus a row of XOR gates, not one engine per segment.
* **Multi-level integrity verification.** Every block MAC binds the block's
  ciphertext to its address, version number and position in the network. The MACs of
  a layer are XORed into a single *layer MAC*, and those of the whole model into a
  single *model MAC*. Both are small enough to stay on chip, so no MAC has to travel
  to DRAM. Per-block MACs kept off chip (*optBlk* level) remain available where a
  block must be checked on its own.

This repository holds synthesizable SystemVerilog for the protection unit that does
both: the Crypt Engine, the Integ Engine and the top that joins them between the
accelerator's SRAM and the memory port. It does not contain the accelerator (systolic
array and SRAM) or the DRAM. The unit exposes the ports they would connect to, and the
testbench models the DRAM.

## Where the unit sits

```
           trusted chip                                        untrusted
 +------------------------------------------------------+
 | compute unit <-> SRAM (ifmap, weights, ofmap)        |
 |                    | req_* (plaintext, PA, VN,       |
 |                    v        layer, fmap, blk index)  |
 |   +------------------ seda_top -------------------+  |
 |   |  crypt_engine      (AES-CTR, per-segment pads)|--+--> mem_req_* ciphertext  --> DRAM
 |   |  integ_engine = mac_hash + mac_verifier       |<-+--- mem_rsp_* ciphertext <--
 |   |    layer MAC table, model MAC register        |--+--> mac_wr_* (optBlk MACs)
 |   +-----------------------------------------------+  |
 |        vcmd_* (verify layer / model), integrity_error |
 +------------------------------------------------------+
```

Module hierarchy (one module or package per file in `rtl/`):

```
seda_top
 +- crypt_engine
 |   +- aes_key_expansion        (Ke; a second one of Ke^ctr when NSEG > 10)
 |   +- aes_core
 +- integ_engine
     +- mac_hash
     |   +- aes_key_expansion    (Kh)
     |   +- aes_core
     +- mac_verifier
packages: seda_pkg (field widths, block record, enums), aes_pkg (AES round functions)
```

## Per-segment pads from one AES call

A data block has `NSEG` segments of 128 bits; segment j occupies bits
`[128j+127:128j]`. With PA the block's physical address, VN its version number, Ke the
encryption key and k_i the i-th round key of Ke's AES-128 key schedule:

```
OTP        = AES_Ke(PA || VN)                  one AES call per block
pad_j      = OTP ^ k_(j+1)                     j = 0..9
pad_j      = OTP ^ k'_(j-9)                    j = 10..19, k' = schedule of Ke ^ (PA || VN)
cipher_j   = plain_j ^ pad_j                   the same XOR decrypts
```

Why bother: if every segment of a block shared the one pad, an attacker who guesses
the block's most common plaintext value (often zero) could read the pad off the most
common ciphertext value. With that pad they could decrypt the whole block. The round
keys are secret and differ from each other, so each segment has its own pad. The
testbenches check exactly this: an all-zero block must come out with four different
ciphertext segments.

The round keys k1..k10 are computed once when Ke is loaded (`aes_key_expansion`, one
round key per clock). They then sit in registers, so the per-segment pads cost only
XOR gates. An AES-128 schedule has ten round keys besides Ke itself. For blocks of
more than ten segments, a second key expansion of `Ke ^ (PA || VN)` runs alongside
the AES call. It finishes in the same ten cycles and supplies ten more keys. `NSEG`
may therefore be 1 to 20, and elaboration stops with an error outside that range. The
default is 4, a 64-byte block.

The pad depends only on PA and VN, not on the data. The counter therefore enters the
Crypt Engine on its own port, ahead of the data. On a read, the top sends the counter
in the same cycle as the DRAM request, so the pad is ready before the DRAM answers.
The plaintext then follows the memory response by two cycles.

## Block MACs and the three verification levels

Each block's MAC is

```
MAC = Hash_Kh( cipher_0 || ... || cipher_(NSEG-1) || PA || VN || layer_id || fmap_idx || blk_idx )
```

It is computed over the ciphertext, so a read can be checked before anything is
decrypted. `Hash` here is CBC-MAC with AES-128 under its own key Kh and a zero IV, in
`mac_hash`. The MAC is the upper 64 bits of the last output. Every message has the
same length (NSEG + 1 blocks), which is the case in which CBC-MAC is a secure MAC.

Binding the location into the MAC is what makes XOR aggregation safe. XOR does not
care about order. If MACs covered only the ciphertext, an attacker could shuffle a
layer's blocks in DRAM and the layer's XOR sum would not change. With PA and the
indices inside every MAC, a block read back from the wrong place gives a different
MAC, and the sum no longer matches.

`mac_verifier` handles each MAC at the level the request asked for:

| level    | on write                                   | on read                                          | state kept               |
|----------|--------------------------------------------|--------------------------------------------------|--------------------------|
| optBlk   | MAC leaves on `mac_wr_*`, stored next to the block | compared at once with the MAC fetched with the block | none on chip       |
| layer    | XORed into `wr_mem[layer]`                 | XORed into `rd_mem[layer]`                       | 2 x 64 bits per layer    |
| model    | XORed into the model reference             | XORed into `model_rd`                            | 2 x 64 bits in all       |

The controller checks a layer with `VCMD_VERIFY_LAYER` once every block of that layer
has been read back. The command compares `wr_mem` and `rd_mem` for that layer and
pulses `vres_valid`/`vres_ok`. It then zeroes both entries, so the layer id can be
used again. `VCMD_VERIFY_MODEL` does the same for the model registers at the end of
an inference and keeps the reference. The model reference can also be loaded from a
trusted source with `VCMD_SET_MODEL`. This covers weights that were encrypted off
line and never pass through the unit's write path. Any failed comparison sets the
sticky `integrity_error`. `VCMD_CLEAR` clears everything, taking 256 cycles to sweep
the layer table, the same sweep as after reset.

These checks catch the following attacks:

* A changed bit changes the block's MAC.
* A block swapped with another, or moved to another layer, has the wrong location
  inside its MAC.
* A stale copy of a block put back in DRAM (replay) was MACed under its old VN, while
  the read uses the current VN.
* A dropped block leaves its MAC missing from the read-side sum.

Replay protection relies on the controller supplying the current VN with every
request.

A command must see every MAC of the blocks requested before it. The top therefore
accepts a command only between blocks, and the Integ Engine accepts one only when no
MAC job is in flight.

## What happens to one block, cycle by cycle

`seda_top` handles one block at a time (edges counted from the request handshake):

* **Write.** Edge 1: the counter enters the Crypt Engine. Edges 1-11: AES. Edge 12:
  the pad is latched. Edge 13: the plaintext is XORed. Edge 14: the ciphertext is
  latched and offered to memory, which takes it at edge 15. In the same stage the
  ciphertext is handed to the Integ Engine as a MAC job.
* **Read.** Edge 1: the counter and the DRAM read request leave together. The DRAM
  response is latched, then two edges later the plaintext is offered on `rsp_*`, and
  the ciphertext, plus the stored MAC at optBlk level, goes to the Integ Engine. The
  response can come no earlier than edge 14, because the pad needs that long.
* **MAC.** `mac_hash` needs 12 cycles per AES call (11 for the call, one to chain),
  so 12 x (NSEG + 1) = 60 cycles per 64-byte block. While it is busy, the next block
  can still be encrypted and written, but it waits in the output stage before handing
  over its own MAC job.

Sustained throughput at the defaults:

* Crypt Engine: 64 B per 11 cycles, about 5.8 B/cycle.
* Whole unit: about 1 B/cycle, limited by the MAC unit.

The paper's edge configuration (10 GB/s at 2.75 GHz, 3.6 B/cycle) is within reach
of the Crypt Engine alone. Its server configuration (20 GB/s at 1 GHz, 20 B/cycle)
would need `NSEG` = 14 for encryption. For the whole unit, both would need a faster
MAC. The MAC is the first thing to change when adapting this RTL; see below.

## Top-level interface (`seda_top`)

All handshakes are valid/ready. Data, address and attributes must stay stable while
valid is high and ready is low. Reset is asynchronous and active low.

| group | signals | meaning |
|---|---|---|
| keys | `ke_valid, ke`, `kh_valid, kh`, `keys_ready` | load the encryption and MAC keys; ready 10 cycles later |
| accelerator side | `req_valid/ready, req_op, req_level, req_meta, req_wdata` | one block: direction (`OP_READ`/`OP_WRITE`), verification level, location record (`blk_meta_t`: pa, vn, layer_id, fmap_idx, blk_idx), plaintext for writes |
| | `rsp_valid/ready, rsp_meta, rsp_rdata` | plaintext of a read |
| memory side | `mem_req_valid/ready, mem_req_we, mem_req_addr, mem_req_wdata` | ciphertext write or read request, byte address = PA |
| | `mem_rsp_valid/ready, mem_rsp_rdata, mem_rsp_rmac` | read data and, for optBlk level, the MAC stored with it |
| | `mac_wr_valid/ready, mac_wr_addr, mac_wr_data` | optBlk MAC of a written block, to be stored by the memory side |
| verification | `vcmd_valid/ready, vcmd, vcmd_layer, vcmd_value` | `VCMD_VERIFY_LAYER`, `VCMD_VERIFY_MODEL`, `VCMD_SET_MODEL`, `VCMD_CLEAR` |
| | `vres_valid, vres_ok`, `blk_chk_valid, blk_chk_ok`, `integrity_error`, `model_mac` | results of layer/model checks (one-cycle pulse), of optBlk checks, sticky error flag, current model reference |

Parameters: `NSEG` (segments of 128 bits per block, default 4, range 1-20) and
`NUM_LAYERS` (layer table entries, default 256). Field widths are in `seda_pkg`:
PA 34 bits (16 GB), VN 32, layer_id 8, fmap_idx 16, blk_idx 32, MAC 64.

## What follows the paper and what is this design's own

Taken from the paper:

* AES-CTR with counter PA || VN.
* The AES engine's round structure (AES-128, ten rounds).
* One AES call per block, with per-segment pads `OTP ^ key_i` from the key schedule.
* Extra keys from expanding `key ^ (PA || VN)`.
* MACs over ciphertext and location fields.
* XOR aggregation into layer and model MACs.
* The three levels and where each level's MACs live.
* The 8-byte MAC and the 16 GB protected memory.

Choices of this design, where the paper is silent:

* **Hash function.** The paper names only "Hash_Kh". CBC-MAC over AES is used here.
  It is also the throughput bottleneck.
* **AES datapath.** One round per clock.
* **Key storage.** Round keys are kept in registers rather than regenerated.
* **Pad assignment.** Which round key masks which segment: k1..k10, not k0.
* **Field widths and record packing.**
* **Layer checking.** Separate write-side and read-side tables, compared on command
  and freed afterwards.
* **Interfaces and sequencing.** The command set, all handshakes, and one block at a
  time through the top.

Not built:

* **Accelerator.** The systolic array and its SRAM are taken from existing NPUs
  (TPU v1, Exynos 990 configurations).
* **Version numbers.** They come with each request, because the paper relies on
  earlier work to generate them on chip.
* **Block-size search.** The search for the best authentication block size is a
  compile-time software step. Its result shows up only as the indices in each
  request.
* **Off-chip layer MACs.** The evaluation mentions an option of storing layer MACs
  off chip. It is not built; layer MACs stay on chip.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. The reference model
(`tb/aes_ref_pkg.sv`) is an AES-128 written separately from the RTL: its S-box is
built by searching for inverses, and its state is handled as a byte matrix. On top
of that AES it computes the pads and the CBC-MAC.

| testbench | what it checks |
|---|---|
| `tb_aes_key_expansion` | FIPS-197 round keys, random keys against the reference, 10-cycle latency |
| `tb_aes_core` | both FIPS-197 example vectors, random blocks, 10-cycle latency, 11-cycle period, back-pressure |
| `tb_crypt_engine` | NSEG = 4 and NSEG = 12: ciphertext against the reference pads, decryption back to plaintext, distinct pads for equal segments, 11-cycle pad latency |
| `tb_mac_hash` | MAC against reference CBC-MAC, moved block changes its MAC, 60-cycle latency |
| `tb_mac_verifier` | all three levels, pass and fail, shuffled read order, freed entries, clear sweep |
| `tb_integ_engine` | optBlk MAC out and check, layer pass, bit flip, block swap, model level, command ordering |
| `tb_seda_workload` | a complete LeNet-5 inference at one byte per element (weights 61 470 B, feature maps 2 814 B, 2 020 block transfers): every block decrypted correctly, every layer MAC and the model MAC verified, reference ciphertext for the first block of each region; prints cycles per block (62 at the defaults) |
| `tb_seda_top` | at default parameters: a clean inference (model-level weights, layer-level and optBlk-level fmaps, all ciphertext and plaintext compared), then bit flip, swap, replay, forged optBlk and changed weight, each of which must be caught; every mechanism counted |

`tb/offchip_mem_model.sv` is a behavioural DRAM with read latency and attacker tasks
(`flip_bit`, `swap_blocks`, `snapshot`/`replay`). `tb/crypt_engine_tester.sv` is a
helper that tests one Crypt Engine configuration.

Run a testbench with plain Verilator 5, for example the end-to-end one:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/seda_pkg.sv rtl/aes_pkg.sv tb/aes_ref_pkg.sv tb/tb_seda_top.sv \
  --top-module tb_seda_top -o sim && ./obj_dir/sim
```

For another testbench, replace the last file and the top-module name. `tb_seda_top`
and `tb_seda_workload` each run in a few seconds. The larger networks (AlexNet and up,
millions of weight bytes) use the same flow with bigger size tables in
`tb_seda_workload`; at about 62 cycles per 64-byte block they take tens of millions of
cycles, so only LeNet-5 is included.

## Changing the design

* **Wider blocks.** Set `NSEG` on `seda_top`. Up to 10 costs only XOR gates and
  wider registers. From 11 to 20 adds the second key expansion to the Crypt Engine.
* **Faster MAC.** Replace `mac_hash`, keeping its ports: key load, block plus
  location record in, 64-bit MAC out. Options are a pipelined AES, several AES cores
  working in parallel, or a Carter-Wegman MAC built from a GF(2^128) multiplier.
  Nothing else depends on how the MAC is computed.
* **More layers.** Change `NUM_LAYERS` and `LAYER_W` in `seda_pkg`.
* **Field widths.** All widths are in `seda_pkg`. The counter (PA + VN) and the
  location record must each fit in 128 bits.
