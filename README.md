# Version-number-driven memory protection for a secure accelerator

An accelerator that processes confidential data in untrusted DRAM has to encrypt
everything it writes and detect any change to what it reads. That includes
*replay*, where an attacker puts back an older, correctly encrypted copy. General-purpose
secure processors handle replay with a per-block version counter that is
itself stored in memory and protected by an integrity tree. Fetching and
checking those counters costs bandwidth and latency.

An accelerator does not need those counters. Its kernel, run by a trusted on-chip
control processor, knows the order in which every tensor or graph buffer is
written. It can therefore *compute* the version number (VN) of each memory
access instead of storing it:

* a layer's output features get a fresh VN each time the layer writes them;
* the weights share one VN for the whole network, bumped on each update;
* gradients get their own per-layer VN;
* an iterative graph algorithm reads with `Iter-1` and writes with `Iter`;
* read-only data (inputs, a graph's adjacency matrix) use a constant VN.

Only the MACs go to memory, and there is one MAC for each large block (512 bytes,
or 64 bytes for fine-grained data). No counters or tree are stored.

This RTL contains the trusted part of such an accelerator:

* the on-chip VN state and its update rules (`mgx_vn_table`);
* the memory protection unit: counter-mode encryption plus a keyed MAC (`mgx_mpu`);
* the AES and GHASH datapaths it uses;
* a top level, `mgx_secure_accel`, that wires these between three external
  parties: the control processor, the functional unit and the DRAM controller.

## Cryptographic construction

For a 16-byte beat of plaintext `U` at physical address `PA`, written under version
`VN`, the stored ciphertext is

    V = U xor AES_Kenc( PA[63:0] || VN[63:0] )

The counter block binds the address and the version together, so two writes never
share a keystream unless one (address, VN) pair is reused. The design is built to
prevent that reuse.

A protection block is 1 to 32 beats that start on a 64-byte boundary. Its 64-bit MAC is

    H    = AES_Kiv(all ones)
    S    = GHASH_H( V_0, V_1, ..., V_{n-1}, {64'b0, 128*n} )
    MAC  = upper 64 bits of ( S xor AES_Kiv( base_PA || VN ) )

This is GMAC over the ciphertext, with the address and VN carried in the mask
block. The MAC is stored at `MAC_BASE + (base_PA >> 6) * 8`, so there is one 8-byte
slot for every 64 bytes of data. A 512-byte block uses only the slot of its first
64 bytes. The MAC region sits above the 16 GiB data space by default
(`MAC_BASE = 0x4_0000_0000`).

Both keys are loaded together (`cp_key_load`). After a load, the unit spends 10
cycles computing `H` before `cp_key_ready` rises.

## Version numbers (`mgx_vn_table`)

A VN is 64 bits: a 2-bit type tag in `[63:62]` and a 62-bit count.

| Tag | Data |
|---|---|
| `00` | features |
| `01` | weights |
| `10` | gradients |
| `11` | graph data (this design's choice) |

Because the tag is part of the VN, two kinds of data can never collide on a VN,
even when their counts are equal.

The table is driven by one command per cycle from the control processor
(`cp_cmd_*`). The resulting VN appears in one of `NUM_SLOTS` slot registers on the
next cycle. The functional unit names a slot in each transfer request, and the top
forwards that slot's VN to the protection unit.

| Command | Effect |
|---|---|
| `SET_F/G/W/IT` | load a value: after re-keying, or for inputs of known VN |
| `RD_F l` | slot := `{00, VN_F[l]}` |
| `WR_F l` | `VN_F[l] := maxF + 1`, `maxF := VN_F[l]`, slot := that |
| `RD_G/WR_G l` | same as above, for the per-layer gradient VNs (`maxG`) |
| `RD_W / WR_W` | read the network-wide weight VN, or bump it for a weight update |
| `IT_INC` | start the next graph iteration |
| `RD_IT / WR_IT` | slot := `Iter-1` (reading last iteration's data) or `Iter` (writing) |
| `CONST v, tag` | slot := `{tag, v}` for read-only data |

Feature writes take the *global* maximum plus one, not the layer's own VN plus one.
This is what makes residual blocks and re-tiled layers safe. A layer whose output
is written `t` times (once per tile, accumulating partial sums) gets `t` fresh VNs.
Any later layer's VN is still larger than every earlier one, so no (address, VN)
pair repeats even if buffers are reused between layers.

The counters do not wrap. A write that would exceed `2^62-1` sets the sticky
`cp_overflow` output and leaves the state as it was. The memory must then be
re-encrypted under new keys, and `cp_ovf_clear` clears the flag. After reset,
every entry reads 0. `NUM_LAYERS = 127` entries of `VN_F` plus `VN_G` come to
about 2 KB of state, stored as two arrays with valid bits.

## Memory protection unit (`mgx_mpu`)

The unit handles one transfer at a time: the request, then `n` data beats, then
one MAC.

**Write:**
1. The request (`addr`, `beats`, `vn`) starts the keystream. AES_Kenc is a
   10-stage pipeline that accepts one counter per cycle, and its outputs queue in
   a 32-entry keystream buffer.
2. Plaintext beats are XORed with the keystream as they arrive.
3. Each ciphertext beat goes to DRAM and into the GHASH accumulator.
4. After the last beat, the length block is folded in, the mask is XORed, and
   the 64-bit MAC is written with an 8-byte strobe.

**Read:** the ciphertext beats are requested, decrypted and forwarded at once.
The recomputed MAC is compared with the stored one, and
`fu_done_valid` / `fu_done_auth_fail` report the result. The consumer must discard
the data of a failed transfer. This is a choice of this design: data is released
before it is verified, to keep latency low.

**Timing:**
* With DRAM that never stalls, an `n`-beat write completes in at most `n + 17`
  cycles after the request is accepted.
* A read completes in at most `n + 17 + L` cycles, where `L` is the DRAM read latency.
* The AES latency is hidden behind the beat stream whenever `n >= 10`.
* Backpressure on any side stalls the unit without losing data.

**DRAM port:** one 16-byte word per request, with `we`, a byte strobe `wstrb`, and
valid/ready handshakes on request and response. Responses return in order.

## Datapath blocks

* `aes128_pipe`: AES-128 encryption.
  * Ten registered rounds, so one block enters per cycle with a latency of exactly 10.
  * Round keys are expanded combinationally from a key held constant.
  * The S-box is computed as the GF(2^8) inverse followed by the affine map, so
    there is no table.
  * A `TAG_W`-bit sideband travels with each block.
* `mgx_mac_engine`: one GF(2^128) multiply per cycle, using the GCM bit order and
  reduction polynomial `0xE1 << 120`.
  * `start` clears the accumulator.
  * Each `beat_valid` folds one beat.
  * `fin_valid` folds the length block and XORs the mask.
  * `tag_valid` rises one cycle after `fin_valid`.
* `mgx_pkg`: shared types (`vn_t`, `vn_type_e`, `vn_op_e`) and the GF arithmetic
  functions.

## Top level (`mgx_secure_accel`)

The top contains the VN table and the protection unit, with all parameters at
their nominal values:

| Parameter | Default |
|---|---|
| `NUM_LAYERS` | 127 |
| `NUM_SLOTS` | 4 |
| `MAX_BEATS` | 32 (512-byte MAC blocks) |
| `LOG2_MAC_GRAN` | 6 (64-byte MAC slots) |
| `MAC_BASE` | 16 GiB |

Its ports go to three external parties:
* `cp_*`: the control processor, which sends VN commands and keys and reads the overflow flag;
* `fu_*`: the functional unit, which sends requests, data and completions;
* `mem_*`: the DRAM controller.

Synthesis maps it to about 165k generic cells. These are mostly the 20 AES rounds
and the GF(2^128) multiplier.

## What is outside this RTL, and departures

**Outside the RTL:**
* The control processor, the compute array or graph engine, the DRAM controllers
  and the DRAM. The testbenches stand in for them.
* The host-side TEE.
* The key exchange and attestation that deliver the two keys. Keys simply arrive
  on `cp_k_enc` / `cp_k_iv`.

**Departures from the scheme as usually described:**
* The VN bookkeeping is a hardware table commanded by the control processor,
  rather than pure software on that processor.
* There is a single DRAM port, where the scheme has separate host and accelerator
  memories.
* The MAC placement and the "data before verification" read policy are this
  design's choices.
* The keyed hash is GMAC truncated to 64 bits.

## Verification

Each block has a self-checking testbench in `tb/`.

| Testbench | What it checks |
|---|---|
| `tb_aes128_pipe` | FIPS-197 vectors, back-to-back issue, 10-cycle latency |
| `tb_mgx_mac_engine` | tags against AES-GCM reference values |
| `tb_mgx_vn_table` | the tiled-layer and residual-block VN sequences, weights, gradients, graph iterations, constants, overflow, and 200 random commands against a model |
| `tb_mgx_mpu` | ciphertext and MACs against reference values; tamper, replay and wrong-VN detection; cycle bounds; stalls and backpressure |
| `tb_mgx_secure_accel` | end to end at the default parameters (see below) |

`tb_mgx_secure_accel` runs three workloads:
* a layer computed in three tiles, with partial sums written back under fresh VNs;
* a training step: a gradient write, then a weight update and a stale-weight replay;
* two iterations of a PageRank-style SpMV with a constant-VN adjacency matrix and
  ping-pong rank buffers.

It also covers tampering, overflow and re-keying. It counts each mechanism:
coarse and fine MACs, each VN kind, authentication failures, overflow, re-key,
DRAM stalls and read backpressure. A mechanism that never happened counts as a failure.

`tb/mgx_dram_model.sv` is a behavioural DRAM with configurable latency and random
stalls.

Simulate with Verilator, for example:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
        rtl/mgx_pkg.sv tb/tb_mgx_secure_accel.sv --top-module tb_mgx_secure_accel
    ./obj_dir/Vtb_mgx_secure_accel

Each testbench prints `TB_RESULT checks=N failures=M`.
