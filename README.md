# Seculator NPU in SystemVerilog

A neural processing unit (NPU) keeps its weights and feature maps in DRAM that it
shares with a host. That DRAM and the bus to it are not trusted. An attacker
there can read data, change it, or put back an older copy of it (a replay).
Encryption hides the data. Blocking tampering and replays needs something more:
each 64-byte block must be encrypted and authenticated under a *version number*
(VN) that changes every time the block is rewritten. In a CPU, these VNs sit in
a memory-resident counter tree, with a cache and an integrity tree to protect them.

This design does away with all of that. A CNN accelerator touches memory in a
pattern that is known before the layer starts. For a given tiling
(loop order), the VN that each tile carries is a short, regular sequence. The
sequence can be produced on chip by three counters. Integrity also needs no
per-block MAC storage. Each block's MAC is XORed into a few 256-bit registers,
and one equation is checked per layer. If any block written by a layer comes
back changed or stale, the equation fails.

This RTL implements a complete NPU on that principle:
- a 32×32 systolic array of 32-bit multiply-accumulate units;
- a 240 KB global buffer;
- a DMA engine;
- a security module with VN generators, four AES-128 engines in counter mode,
  a SHA-256 MAC generator and the layer-level MAC verifier.

It runs an instruction stream from the host and reports, per layer, whether
the previous layer's data survived the round trip through memory.

## The version-number sequence

A layer's ofmaps (output feature maps) are written to memory, possibly several
times: partial sums are spilled when the buffer cannot hold all the channels.
Later they are read back, either as partial sums by the same layer or as
ifmaps (input feature maps) by the next one. For every common dataflow, the
sequence of VNs seen by the tiles of one stream has the form

    (1^η, 2^η, …, κ^η)^ρ

Here `v^η` means "value v for η consecutive tiles", and the bracket is
repeated ρ times. Take an input-reuse schedule with two channel tiles and two
ofmap tiles, as in the end-to-end test:
- The writes of the ofmap tiles carry VNs 1, 1, 2, 2, so the triplet
  ⟨η, κ, ρ⟩ is ⟨2, 2, 1⟩.
- The partial-sum reads carry 1, 1, which is ⟨2, 1, 1⟩.

The host computes the triplets for its tiling and sends them with the layer.

`vn_generator` is the circuit for one such stream. It holds:
- the triplet;
- the current value;
- a count within the current value, up to η;
- a count of repetitions, up to ρ.

It steps once per tile, on the tile's last block. It raises `done` after
η·κ·ρ tiles, and a triplet with a zero is an empty sequence. A request for a
stream whose sequence is already used up counts as a breach. Such a request
means the host's schedule and the actual traffic disagree.

The security module has three generators:

| generator | stream | used for |
|---|---|---|
| write | ofmap stores | VN of every block written |
| read  | ofmap loads (partial sums) | VN expected on a reload |
| input | ifmap loads | *first-read* detection: its value counts read passes, so a read with value 1 is the first read of that tile |

An ifmap load does not use a generator for its VN. Ifmaps are the previous
layer's final output, so their VN is the last VN the previous layer wrote.
The host gives it as `in_vn`, and the previous layer's id goes with it.
Weights are never rewritten and use VN 1.

## Encrypting a block

Each 64-byte block is XORed with a 64-byte pad. Four AES-128 engines
(`aes128_core`, one round per clock, 11 clocks) each encrypt one 128-bit
counter:

    { layer_id[15:0], fmap_id[15:0], vn[31:0], blk_idx[31:0], 30'b0, engine[1:0] }

The layer and fmap ids form the "major" part of the counter. The VN and the
block's index within its fmap form the "minor" part. So a block never reuses
a pad, as long as the VN advances whenever it is rewritten.

The key depends on who wrote the data:
- Data written by the NPU is encrypted under `{SECRET_ID, random}`.
  `SECRET_ID` is a 64-bit parameter standing for the chip's embedded
  identity. `random` is a 64-bit number the host supplies per run in the layer
  configuration.
- Data the host writes (weights, and the network's input when `ext_in` is set)
  is encrypted under the host's 128-bit session key, sent with each layer.

## Layer-level integrity

`mac_generator` computes for each block

    MAC = SHA-256( P ‖ L ‖ F ‖ VN ‖ I ‖ B )

The fields are:
- P: the 64-bit secret id;
- L: the 16-bit layer id;
- F: the 16-bit fmap id;
- VN: the 32-bit version number;
- I: the 32-bit block index;
- B: the 512-bit plaintext.

That is 84 bytes, which padding makes two SHA-256 blocks, taking 133 clocks
on `sha256_core` (66 clocks per compression).

`mac_verifier` never stores a MAC. It XORs each one into a register:

| register | receives |
|---|---|
| MAC_W | MACs of ofmap blocks this layer writes |
| MAC_R | MACs of ofmap blocks this layer reads back (partial sums) |
| MAC_FR | MACs of ifmap blocks on their first read |
| MAC_IR | MACs of all ifmap reads |

If memory behaved honestly, every block the previous layer wrote was read back
exactly once in its written version:
- either as a partial sum inside that layer (MAC_R);
- or, for the final version, as an ifmap of this layer (MAC_FR).

Hence the check

    MAC_W(previous layer) == MAC_FR xor MAC_R(previous layer)

A tampered or replayed block gives a MAC that differs from the one that was
written, so the two sides no longer cancel.

A tile read a second time contributes its MAC to MAC_IR twice, which cancels.
So MAC_IR must equal 0 when every tile was read an even number of times, or
MAC_FR when every tile was read an odd number of times. A re-read with
altered data breaks this.

The previous layer's MAC_W and MAC_R are still needed while the current layer
runs, so there are two (MAC_W, MAC_R) pairs. They swap at every layer start.
The check runs at the end of the layer that consumes the data:
`OP_LAYER_END` with `check_prev` set. Because of this, the last layer's output
is only checked by a further layer that reads it. The end-to-end test uses
such a layer.

A failed check sets `breach`, which stays set until reset, and the layer
reports `layer_ok = 0`. What happens next, such as a system reboot, is up to
the system.

Host-written data (weights, network input) carries no MAC here. It is
decrypted with the session key and its SHA step is skipped (13 clocks instead
of 147 per block). Checking its integrity would need MACs made by the host,
and no format for them is defined.

## The datapath

`compute_engine` drives a ROWS×COLS output-stationary systolic array of `pe`
cells. Convolutions are expected to be lowered to matrix products by the
host: A is pixels × input channels, B is input channels × output channels.
A command computes

    C = A·B   or   C += A·B   (accumulate bit)

C is ROWS×COLS. All operands sit in the global buffer:
- A is column-major: for each k, ROWS words over ⌈ROWS/16⌉ lines.
- B is row-major: for each k, COLS words over ⌈COLS/16⌉ lines.
- C is column-major like A.

So an ofmap tile written by one layer is laid out exactly as the next layer's
ifmap tile. With accumulate set, C is read from the buffer and added, which
continues partial sums that were spilled to memory and reloaded.

The engine runs in three steps:
1. It streams the operands with the usual diagonal skew.
2. It drains for ROWS+COLS+2 clocks.
3. It writes C back with a read-add-write per line.

A command takes

    1 + K·(LA+LB) + (ROWS+COLS+2) + 2·COLS·LA + 2   clocks,   LA = LB = 2 at 32×32

Arithmetic is 32-bit integer with wrap-around, and a word is one "pixel" of
four bytes.

`global_buffer` is 3840 lines of 64 bytes (245,760 bytes) with two
synchronous read/write ports and a one-cycle read latency:
- port A belongs to the DMA engine;
- port B belongs to the compute engine.

Which regions hold ifmaps, weights and ofmaps is the host's choice.

`dma_engine` moves one tile: `nblk` consecutive blocks between buffer lines
and memory block addresses, handled one at a time.
- A store reads the buffer, encrypts, then writes memory.
- A load reads memory, decrypts, then writes the buffer.

It flags a tile's last block, so that the VN generators step once per tile.

## Instructions and timing

`seculator_top` accepts an `instr_t` on a valid/ready port and executes
instructions one at a time, in order:

| opcode | payload | effect |
|---|---|---|
| `OP_LAYER_START` | `layer_cfg_t` | layer and previous-layer ids, `in_vn`, the three triplets, `check_prev`, `ext_in`, `random`, session key; swaps the MAC register pair |
| `OP_TILE` | `tile_cmd_t` | one DMA transfer (direction, class ifmap/ofmap/weight, fmap id, first block index, block count, memory address, buffer line) |
| `OP_COMPUTE` | `ce_cmd_t` | one matrix tile (A, B, C lines, K, accumulate) |
| `OP_LAYER_END` | — | runs the check; `layer_done` pulses, `layer_ok` tells the result |

`instr_ready` is high only when the NPU is idle, so a host can issue the next
instruction as soon as it sees `instr_ready` again.

The memory port works as follows:
- it carries one 64-byte block per request (`mem_req_valid`/`mem_req_ready`,
  `mem_we`, `mem_addr` in block units);
- a read returns one `mem_rvalid` pulse with the data, any number of cycles
  later.

Each block costs about 150 clocks of security processing plus the memory
latency. Transfers and computation do not overlap. That keeps the design
simple, but it makes the NPU much slower than a pipelined one. In the
end-to-end test, with 100-clock memory, the three test layers (384 blocks
moved with MACs, 192 without, 6 compute tiles) take about 116,000 clocks.

## Where this departs from the original design

- **Instruction protection.** Instructions are taken in plain form. In the
  original design they come over a link protected by a key shared with the
  host. That channel, the host CPU, its caches and the DRAM are outside this
  RTL.
- **Host-supplied data.** The original design names a session key for data
  decrypted "for the first time" but does not say how such data is
  authenticated. Here it is decrypted only, not checked.
- **Choices the original leaves open.** The following are this design's own:
  - the field widths of the counter and MAC message;
  - the MAC over the plaintext;
  - the 64/64 split of the key;
  - the ISA;
  - the `check_prev`/`ext_in` bits;
  - the exhausted-sequence breach;
  - the one-block-at-a-time security path and its latency;
  - the output-stationary dataflow and integer arithmetic.
- **Layer types.** Only the matrix product is built. The compute engine has
  no activation, pooling or pre-processing unit. The original analyses the
  VN patterns of such layers but does not describe hardware for them. A
  layer whose work cannot be lowered to a matrix product would need such a
  unit added.
- **Performance.** No attempt is made to match the original's performance.
  It used a cycle-level simulator, and the crypto units there are pipelined.

## Workload sizes

The networks evaluated for this scheme (MobileNet, ResNet-18, AlexNet,
VGG16/19, and a base layer widened from 32×32×3 to 192×192×3) all run on the
default configuration, since every layer is streamed through the buffer in
tiles. Their limits are the id and counter widths:
- 2^32 memory blocks (256 GiB);
- 16-bit layer and fmap ids;
- 32-bit VNs and block indices;
- 16-bit triplet values.

VGG16's 552 MB of weights is 8.6 million blocks, and its largest feature
map, 12.8 MB, is 200,704 blocks. Both are far below these limits.

## Size

At the defaults, a generic synthesis of `seculator_top` gives:
- about 40,000 cells;
- 137,000 flip-flop bits, most of them the 1024 PEs' operand and
  accumulator registers;
- a 1.97 Mbit buffer memory.

The security path is small next to the array. It is four iterative AES-128
cores (one round unit each), one SHA-256 round unit and 1.5 kbit of MAC
registers (two MAC_W/MAC_R pairs, MAC_FR and MAC_IR, 256 bits each).

## Files

`rtl/` (synthesizable; every parameter's default is the full-size value):

| file | contents |
|---|---|
| `seculator_pkg.sv` | widths, block/MAC types, instruction and configuration structs |
| `seculator_top.sv` | the NPU: instruction sequencer and the four units |
| `security_module.sv` | VN selection, AES-CTR, MAC, verifier hookup, session key |
| `vn_generator.sv` | the ⟨η, κ, ρ⟩ sequence generator |
| `aes_ctr_unit.sv`, `aes128_core.sv` | four-engine counter mode; iterative AES-128 with a computed S-box |
| `mac_generator.sv`, `sha256_core.sv` | block MAC; iterative SHA-256 |
| `mac_verifier.sv` | MAC_W/MAC_R pairs, MAC_FR, MAC_IR and the layer check |
| `dma_engine.sv`, `global_buffer.sv` | tile transfers; 240 KB two-port buffer |
| `compute_engine.sv`, `pe.sv` | systolic array and its controller |

`tb/` holds one self-checking testbench per module, plus:
- `crypto_ref_pkg.sv`: reference AES-128, SHA-256, block MAC and pad functions;
- `mem_model.sv`: a DRAM model with a configurable latency and random refusals.

Reference checks:
- The crypto cores are checked against the published FIPS vectors.
- The MAC and pad against the reference package.
- The VN generator against the master equation for random triplets.
- The compute engine against a software product, including exact latency.

`tb_seculator_top.sv` runs the full-size NPU on three layers:
1. A first layer spills and reloads partial sums, with VNs 1 then 2.
2. A second layer consumes them.
3. A third layer reads the second layer's output twice.

It decrypts the results in memory and compares them with the reference
products. It then repeats the run twice: once with one bit of layer 1's output
flipped in memory, and once with that output replaced by its stale first
version. Both must be reported as a breach. It also counts each mechanism and
fails if one never occurred:
- partial-sum reloads;
- second-version writes;
- first and repeated reads;
- session-key decryption;
- memory stalls;
- accumulating computes;
- passed and failed layer checks.

`tb_conv_layer.sv` runs a real layer shape: an H×H×3 image with 3×3 filters,
zero padding and 32 output channels, lowered to a matrix product by the host
(im2col). A second layer then reads the output back and checks it.
- H = 32, the default, is the base layer of the layer-widening study. It
  takes about a million clocks.
- H = 64 has been run too, at about 4.1 million clocks.
- The wider layers, 128 to 192, differ only in H.

Every testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/seculator_pkg.sv tb/crypto_ref_pkg.sv tb/mem_model.sv \
        tb/tb_seculator_top.sv --top-module tb_seculator_top -y rtl
    ./obj_dir/Vtb_seculator_top

The full-size end-to-end run takes about a minute to build and a few seconds
to simulate.
