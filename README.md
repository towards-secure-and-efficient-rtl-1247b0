# Memory protection unit for a DNN accelerator

A DNN accelerator keeps its working set (feature maps and weights) in on-chip
SRAM and spills the rest to DRAM. If the DRAM is untrusted, anything that
leaves the chip must be encrypted. Anything that comes back must also be
checked for tampering. Conventional schemes, like the one in SGX, attach a
version number and a MAC to every 64-byte line and keep an integrity tree
over them. That costs DNN workloads 13-30 % more memory traffic.

This RTL implements a cheaper scheme, built on two ideas:

1. **Bandwidth-aware counter-mode encryption.** A data block of up to
   `N_LANES` × 16 bytes needs one AES operation, not `N_LANES` of them.
   - The single AES output is the *shared pad*. Each 16-byte sub-block gets
     its own pad: the shared pad XORed with a different *combination key*.
   - A combination key is the XOR of a fixed subset of the AES round keys.
   - So every sub-block still gets a distinct keystream, at the cost of a
     few XOR gates instead of extra AES engines.
2. **Multi-level XOR-aggregated MACs.** Every authentication block gets a
   64-bit MAC bound to its address, version, layer number and index in the
   layer.
   - These MACs are never stored. They are XOR-folded into one MAC per tile,
     one per layer, and one for all the model's weights.
   - Only the layer MACs (2 KiB for 256 layers) and the model MAC stay on
     chip.
   - When a layer is read back, its MAC is recomputed and compared.

The unit sits between the accelerator's SRAM and the DRAM controller. Writes
go in as plaintext and come out as ciphertext plus integrity state. Reads go
in as ciphertext and come out as plaintext plus a verdict.

```
 on-chip SRAM side                                          DRAM side
 req (hdr, n, data) ──► crypt_engine ──► rsp (hdr, data)
                           │   ▲
                           │   └ aes_key_expand ─► comb_key_gen
                           │   └ aes_core  (shared pad = AES_Ke(PA‖VN))
                           ▼
                       integ_engine ── mac_engine (aes_key_expand, aes_core)
                           │        └─ layer_mac_table
                           ▼
            tile_mac_*, layer_mac_*, layer_ver_*, model_ver_*
```

`protection_unit` is the top. Its request and response ports carry both
directions, so the same crypt path encrypts writes and decrypts reads.
The MAC engine is always fed the **ciphertext**: on writes that is the crypt
output; on reads it is the request data.

## Files

| file | contents |
|---|---|
| `rtl/sec_pkg.sv` | widths, the header struct, and AES and GF(2^128) functions; the S-box is computed at elaboration |
| `rtl/aes_key_expand.sv` | AES-128 key schedule, one round key per cycle |
| `rtl/aes_core.sv` | AES-128 encryption, one round per cycle, 11 cycles per block |
| `rtl/comb_key_gen.sv` | LFSR selection of round-key subsets; builds the combination keys |
| `rtl/crypt_engine.sv` | bandwidth-aware AES-CTR over 1..N_LANES sub-blocks |
| `rtl/mac_engine.sv` | per-block MAC (hash, then AES) |
| `rtl/layer_mac_table.sv` | on-chip table of reference layer MACs with valid bits |
| `rtl/integ_engine.sv` | tile, layer and model aggregation and verification |
| `rtl/protection_unit.sv` | top |
| `tb/tb_ref_pkg.sv` | independent reference models of AES, the pads and the MAC |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Counter-mode encryption with combination keys

The counter block is `{PA[63:0], VN[63:0]}`. PA is the block's physical
address. VN is its version number, supplied by the accelerator's control
logic, which knows when a tensor is rewritten.

The key schedule yields round keys k0..k10. k0 is the key itself and is not
used in combinations. Bit j of a 10-bit mask selects k(j+1), so there are
2^10 possible subsets. Sub-block i (bits `[128i +: 128]` of the data) is
processed as:

```
shared_pad  = AES_Ke(PA ‖ VN)
comb_key[i] = XOR of k(j+1) for every set bit j of mask[i]
out[i]      = in[i] ^ shared_pad ^ comb_key[i]       (encrypt and decrypt alike)
```

**Choosing the masks.** They come from a 10-bit maximal-length LFSR
(x^10 + x^7 + 1) started at `cfg_seed`. A zero seed is replaced by 1.
Consecutive LFSR states are distinct and non-zero, so the N_LANES masks are
distinct and non-zero.

**When the masks change.** They are drawn once per configuration, not per
block. The reader must rebuild exactly the pads the writer used. Freshness
per block comes from PA‖VN in the shared pad. The lanes of one block differ
because their combination keys differ.

`tb_crypt_engine` checks this directly. It encrypts an all-zero block and
confirms that no two lanes produce the same ciphertext. The broken copy in
which all lanes share one pad fails 65 of 135 checks.

**Bandwidth.** `req_n` (1..N_LANES) is how many sub-blocks a request carries;
it is the "required bandwidth over one AES engine's bandwidth". Unused lanes
output zero. With the response taken at once, a new request is accepted in
the same cycle, so the engine runs one block every 11 cycles.

## Authentication: why the MAC is not a GMAC

The layer MAC is an XOR of block MACs, and XOR ignores order. If the block
MAC did not depend on the block's position, an attacker could swap two
blocks or tiles of a layer in DRAM and the layer MAC would not change: the
re-permutation attack. The countermeasure is to bind each block's MAC to its
PA, VN, layer number and index within the layer.

That binding is only enough if the MAC is not linear in the data. Take a
GMAC-style MAC: hash(data, metadata) XOR pad, with a polynomial hash.
- It can be split as f(data) ⊕ g(metadata).
- Swap the *contents* of blocks A and B while keeping their addresses.
- The XOR over the layer is then unchanged: the f terms only trade places,
  and the g terms did not move.

An early version of this design had exactly that flaw. The integrity
testbench caught it.

The MAC is therefore hash-then-encrypt:

```
H   = AES_Kh(0)                                   computed at configuration
X   = 0
X   = (X ^ c) · H   in GF(2^128), mod x^128 + x^7 + x^2 + x + 1, for c in
        {PA, VN}, {layer_id[15:0], opt_blk_idx[31:0], 80'b0},
        data chunk 0, 1, ..., {chunk count[63:0], 64'b0}
MAC = AES_Kh(X)[127:64]
```

The final AES makes each block MAC a pseudorandom function of everything it
covers, so any change to a block's contents or placement changes the
aggregate. The end-to-end test builds a layer, swaps two blocks' ciphertext
in the DRAM model, and requires a failed verdict.

`mac_engine` has one shared GF(2^128) multiplier (a bit-serial Horner loop,
unrolled in logic) and one AES core. It absorbs one chunk per cycle. It hands
X to the AES and starts hashing the next block while the AES runs. A per-block
user tag travels with the MAC. `integ_engine` uses that tag to carry the
block's direction, weight bit, tile_last, layer_last and layer number through
the pipeline.

**Aggregation rules in `integ_engine`.**
- Feature-map blocks fold into a per-direction tile accumulator and layer
  accumulator. Write and read are kept apart, so a layer's input can be read
  while its output is written.
- At `tile_last` the tile MAC is emitted on `tile_mac_*`, for systems that
  keep tile MACs off chip.
- **`layer_last` on a write:** the layer MAC is stored in `layer_mac_table`
  and also emitted on `layer_mac_*`.
- **`layer_last` on a read:** the table is read, and one cycle later
  `layer_ver_ok` reports whether the entry exists and matches.
- **Weight blocks** skip the layer level. Writes build the reference model
  MAC; reads build a running one. A `model_check` pulse, given at the end of
  inference, compares the two and clears the running value.
- **What the reader must do:** for a check to pass, it must fetch every
  authentication block of the layer (or of the weights) exactly once between
  checks. The software chooses the block partition so that tiles with
  overlapping halos still fetch whole blocks once. That partition is the
  GCD-based analysis, which is not hardware and is not part of this RTL.

## Interfaces and timing

**Configuration.** Pulse `cfg_start` with `cfg_enc_key` (Ke), `cfg_mac_key`
(Kh) and `cfg_seed`. Requests are refused until `cfg_ready`, which comes
a few tens of cycles later (two key schedules, the hash key H and the combination keys). A new `cfg_start` clears the layer table and every
aggregate.

**Requests.** `req_valid/req_ready` handshake. `req_hdr` is an `xfer_hdr_t`:

| field | meaning |
|---|---|
| dir | write or read |
| weight | the block is part of the weights |
| blk_first, blk_last | first and last beat of an authentication block |
| tile_last, layer_last | the block closes a tile or a layer |
| pa, vn | counter inputs |
| layer | layer number |
| idx | index of the block within the layer |

`req_n` gives the number of 16-byte lanes in use; `req_data` holds N_LANES ×
128 bits. An authentication block may span several beats. Each beat gets its
own AES pad, so give each beat its own PA.

**Responses.** `rsp_valid/rsp_ready` returns the header and the transformed
data.
- A beat is released only when both the consumer and the MAC engine can take
  it.
- Back-pressure from either one stalls the crypt engine.
- Requests and responses must hold steady until taken. Assertions check this.

**Rates (checked by the testbenches).**

| operation | timing |
|---|---|
| AES block | 11 cycles: initial AddRoundKey plus 10 rounds |
| crypt engine | one beat per 11 cycles, any lane count |
| MAC of a single-beat block of n chunks | ready n + 14 cycles after the beat |
| MAC throughput | one block per max(11, n + 4) cycles |
| whole unit at n = 8 | one beat per 12 cycles, about 10.7 B/cycle |

Enough for the edge configuration: 10 GB/s at 2.75 GHz is 3.6 B/cycle.
Not enough for the server configuration: 20 GB/s at 1 GHz is 20 B/cycle.
A single unit stays below 16 B/cycle at any lane count, so a server system
needs two units side by side, interleaved by address.

**Reset and size.** Reset is synchronous and active low. With default
parameters (8 lanes, 256 layers), coarse synthesis gives about 1,250 cells,
8.7 k flip-flop bits, and a 16 kbit memory for the layer table.

## Departures and open points

- **MAC algorithm.** The source design names the MAC inputs but not the
  algorithm. Hash-then-AES is this design's choice, for the reason above. It
  needs a second key schedule and a second AES core, in `mac_engine`.
- **Widths.**
  - PA 64 bits and VN 64 bits, filling the 128-bit counter;
  - layer number 16 bits, block index 32 bits;
  - MAC 64 bits, matching the usual 8-byte MAC;
  - all of these are choices of this design.
- **Round-key pool.** k1..k10; k0 is left out.
  - The empty subset is never chosen, since its combination key is zero and
    that lane would use the shared pad directly.
  - The 2^10 count of possible subsets includes it, but nothing relies on it.
- **Random selection.** An LFSR, drawn once per configuration. It is not a
  fresh random draw per block.
- **Version numbers.** They are inputs; this unit does not generate or store
  them.
- **Tile MACs.** They are only emitted. Keeping them on or off chip is up to
  the system.
- **Layer MACs.** Stored on chip; `N_LAYERS` = 256 by choice. Every network
  of the evaluation suite has fewer layers, from 5 for LeNet to about 60 for
  a Transformer.
- **Outside this RTL.** The PE array, the SRAM, the DRAM and its controller,
  and the software that partitions tensors into authentication blocks. Their
  side of the unit is the request/response port pair.
- **Hardware cost.** The combination keys are computed once at configuration
  and held in registers: N_LANES × 128 flip-flops. This trades a little area
  for an XOR-only data path.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. To run one with
Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/sec_pkg.sv tb/tb_ref_pkg.sv tb/tb_protection_unit.sv \
  --top-module tb_protection_unit -o sim && ./obj_dir/sim
```

`tb_protection_unit` runs the top at its default parameters. It uses a
tamperable associative-array DRAM model and covers:
- writes and reads with 1, 4 and 8 lanes;
- random back-pressure from the consumer, including stalls caused by the MAC
  engine;
- multi-beat blocks and tiles;
- clean layer checks;
- a flipped bit, a swap of two blocks' ciphertext, a replayed old version,
  and a layer that was never written;
- the model check, clean and after tampering;
- the one-beat-per-11-cycles rate.

It counts each of these and fails if any never happened.

The reference models in `tb/tb_ref_pkg.sv` are written separately from the
RTL. They use a different bit order for the GF(2^128) multiply. The AES
core and key schedule are also checked against the FIPS-197 example vectors.
