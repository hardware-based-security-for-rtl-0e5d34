# Binding virtual PCRs to a hardware TPM

A server that runs many virtual machines gives each one a virtual TPM
(vTPM). The vTPMs are software, so their Platform Configuration Registers
(vPCRs), which record what software was measured, can be changed by an
attacker without a trace. A hardware TPM protects its own PCRs, but it has
only a few of them (24 in TPM v1.2) and cannot hold thousands of vPCRs.

This RTL adds two small engines to a hardware TPM. Each engine folds all vPCRs
of one index *i* (one per vTPM) into hardware PCR *i*. After that, a vPCR can
no longer be changed in software unless the matching hardware PCR changes
too:

* **Hash-tree binding.** The vPCRs of index *i* are the leaves of a binary
  hash tree of height *l*. The host keeps the tree; the TPM keeps only the
  root. To change a leaf, the host walks the TPM from that leaf up to the
  root, one level per command. The TPM recomputes both the old path and the
  new path. It installs the new root only if the old path gives back the
  root it already holds. Two SHA-1 cores run side by side, one per path.
* **Incremental-hash binding.** Hardware PCR *i* is a 512-bit number: the
  product, modulo a prime *m*, of one SHA-512 value per vTPM. Binding or
  unbinding a vTPM multiplies or divides by one factor. An extend of a vPCR
  divides out the old factor and multiplies in a new one. Whatever the number
  of vTPMs, that is one division and one multiplication.

The design follows a published proposal for hardware-backed vTPMs: the two
schemes, the command layout, the parallel datapath, the algorithms and the
cycle counts of the SHA-1, SHA-512 and modular-multiplication units. The
proposal leaves some things open. The sections below say what this RTL
chose for each of them.

## Block diagram

```
             4-byte command blocks (from the LPC bus interface, not included)
                              |
                      +----------------+
                      | tpm_cmd_parser |  tag / size / ordinal check, field extraction
                      +----------------+
                              | ht_cmd_t
                      +----------------+      setup write (first root)
                      | ht_controller  |<---- attestation read port
                      |  c_i counters  |
                      |  pcr_bank 24x160
                      +----------------+
                              |
                      +----------------+
                      |  ht_datapath   |  PCR_old  sibling_i  PCR_new
                      | sha1_core x 2  |  (mux: external value or SHA-1 result)
                      +----------------+

   inc_req (direct port) --> +---------------+
                             | inc_hash_unit |  pcr_bank 24x512 (reset value 1)
                             |  sha512_core  |
                             |  moddiv_binary|
                             |  modmul_interleaved
                             +---------------+
```

`vtpm_binding_top` holds both engines. They share nothing and can work at the
same time.

## Hash-tree binding

### What the TPM computes

The host first sends `TPM_Update_Leaf_Init(i, l, vPCR_old, vPCR_new)`. Then
it sends *l* `TPM_Update_Leaf(i, sibling)` commands, one per tree level,
starting at the leaf. The controller keeps a counter `c_i` per PCR:

| command | condition | action | answer |
|---|---|---|---|
| Init | `c_i != 0`, or another PCR's update still holds the datapath | none | `ST_ERR_BUSY` |
| Init | `l == 0` or index >= 24 | none | `ST_ERR_PARAM` |
| Init | otherwise | `c_i = l`, `PCR_old = vPCR_old`, `PCR_new = vPCR_new` | `ST_OK` |
| Update_Leaf | `c_i == 0` | none | `ST_ERR_NOINIT` |
| Update_Leaf | `c_i > 1` | `PCR_old = H(PCR_old‖s)`, `PCR_new = H(PCR_new‖s)` (operands swapped for a left sibling), `c_i -= 1` | `ST_OK` |
| Update_Leaf | `c_i == 1` | same, then compare `PCR_old` with hardware `PCR_i` | `ST_ROOT` and `PCR_i = PCR_new` if they match, else `ST_ERR_TAMPER` |
| anything malformed | | none | `ST_ERR_CMD` |

`H` is SHA-1 and `‖` is concatenation. Each hashed message is 40 bytes, so
it fits in one SHA-1 block.

**Hardest point: which side the sibling is on.** A tree node is the hash of
its left child followed by its right child. On the way from a leaf to the
root, the running value is sometimes the left child and sometimes the right
one. The source algorithm always computes *running value ‖ sibling*, which is
only correct where the running value is the left child. Read literally, only
leaf 0 of an ordinary tree could ever be updated. Every other path has a
level where the order is wrong, the recomputed old root never matches
`PCR_i`, and the update is refused as tampering.

This RTL therefore lets each `TPM_Update_Leaf` say which side its sibling is
on, using the ordinal:

* ordinal 1: the sibling is the right child. The TPM computes
  `H(tmp‖sibling)`, the order of the source algorithm.
* ordinal 2: the sibling is the left child. The TPM computes
  `H(sibling‖tmp)`.

In the datapath, a side bit is stored next to the sibling register. It swaps
the two halves of the message at the inputs of both SHA-1 cores. The host
takes the side from the leaf's index *k* (leaves numbered from 0, level 0
next to the leaf): at level *j* it sends ordinal 2 if bit *j* of *k* is 1.
If a host sends ordinal 1 on every level, the design behaves exactly as the
source algorithm. `tb_ht_tree_1024` shows both cases. It changes leaves
anywhere in a full 1024-leaf tree, and each change reaches the root. A
right-half leaf sent with ordinal 1 only is refused.

The side bit does not weaken the check. The old and new paths use the same
siblings and the same sides. The new root is installed only if the old path,
hashed in that order, gives back `PCR_i`. Forging a different order would
still require a SHA-1 collision with `PCR_i`.

**Number of calls.** The counter starts at *l* and drops by one per call, so a
tree of height *l* takes *l* calls. This matches the algorithm and the timing
table of the proposal. One sentence of its prose says *l − 1*; that sentence
is not followed.

**The first root.** The source does not say how the root of a new tree
reaches `PCR_i`. The controller has a setup write port for it.

**One datapath for all PCRs.** The datapath has one pair of working
registers, but there is a counter per PCR. While one PCR's update is running,
an Init for any PCR is refused.

### Command format

Every command is big-endian and arrives in 4-byte blocks (first byte in bits
31:24):

| field | bytes | Init | Update_Leaf |
|---|---|---|---|
| tag | 2 | `00 C1` | `00 C1` |
| parameter size | 4 | `00 00 00 38` (56) | `00 00 00 22` (34) |
| ordinal | 4 | `00 00 00 00` | `00 00 00 01` right sibling, `00 00 00 02` left sibling (own choice) |
| PCR index | 4 | e.g. `00 00 00 05` | index |
| tree height | 2 | e.g. `00 0A` | – |
| old digest | 20 | vPCR_old | – |
| new digest | 20 | vPCR_new | – |
| sibling | 20 | – | sibling |

The proposal gives the Init layout and its example values. For Update_Leaf it
gives only the length, 34 bytes. The layout above fills those 34 bytes with the
same header plus index and sibling. The ninth block of an Update_Leaf carries 2
command bytes; the parser ignores its other 2. Unknown tags or ordinals, a
size that does not match the ordinal, and sizes outside 10..1024 give
`ST_ERR_CMD`.

### Datapath

`ht_datapath` has three 160-bit registers: `PCR_old`, `sibling_i` and
`PCR_new`. A two-input multiplexer sits in front of each PCR register. It
selects either the Init values or the SHA-1 result of the previous level.
Writing the sibling, together with its side bit, starts both SHA-1 cores on
the next clock. When both finish, their results go back into the PCR
registers.

### Timing

`sha1_core` does one round per clock (80 rounds plus 1 cycle for the final
addition). It then holds `done` until 175 clocks after `start`, the per-hash
cost the proposal reports for its unoptimised core. `LATENCY` sets this
number (minimum 81). One level costs `LATENCY + 2` clocks in the datapath.
An Update_Leaf is answered `LATENCY + 3` clocks after the controller accepts
it.

The TPM sits on the 4-bit LPC bus. A DMA write of a 4-byte block costs
8 data clocks plus 24 overhead clocks. An Init (56 bytes) therefore takes
448 clocks on the bus, and an Update_Leaf (34 bytes) takes 284. The
end-to-end testbench models this bus timing and measures a complete leaf
update:

| tree height | proposal, parallel design (clocks) | this RTL + bus model (clocks) |
|---|---|---|
| 2  | 448 + 2·284 + 2·175 = 1366   | 1379 |
| 10 | 448 + 10·284 + 10·175 = 5038 | 5091 |
| 20 | 448 + 20·284 + 20·175 = 9628 | 9731 |

The difference is 5 clocks per level plus 3: the parser, sibling, write-back
and response registers, and one clock for the host to see each answer. At
33 MHz, height 10 takes 154 µs. About two thirds of that time is bus
transfer (3288 of 5091 clocks), not hashing.

## Incremental-hash binding

`inc_hash_unit` keeps 24 PCRs of 512 bits. Each resets to 1, the empty
product. `H` is SHA-512 of the bytes shown, reduced modulo *m*:

| operation | result |
|---|---|
| `INC_ADD(i, k, v)` (bind vTPM *k*) | `PCR_i = PCR_i · H(k‖v) mod m` |
| `INC_REMOVE(i, k, v)` (unbind) | `PCR_i = PCR_i / H(k‖v) mod m` |
| `INC_UPDATE(i, old, new)` (extend) | `h = PCR_i / H(i‖old)`, then `PCR_i = h · H(i‖new‖PCR_i) mod m` |

Byte sizes: *k* and *i* are 4 bytes, vPCRs 20, `PCR_i` 64. The longest
message is 88 bytes, so every hash fits in one SHA-512 block. The request
carries the 4-byte value that goes in front of the vPCR in a `tag` field. The
reason: the proposal puts the vTPM number *k* there in its setup formula and
the PCR number *i* in its update algorithm, so the caller chooses. The
default *m* is 2^512 − 569, the largest prime below 2^512. The proposal says
only that *m* is prime. `MODULUS` and `K` are parameters.

**Hardest point: updates keep history, so old factors cannot be divided out
again.** The update hashes the old `PCR_i` into the new factor. This keeps the
update history, as TPM PCRs do. But after an extend, the factor that vTPM
contributes is `H(i‖new‖PCR_old)`, not `H(i‖new)`. The next update or remove
of that vTPM divides by `H(i‖new)`, which was never multiplied in. That is what the
specified algorithm does, and the RTL implements it exactly. A verifier must
therefore replay the whole log of updates, not just the current vPCRs. This is
why the proposal calls verification *O(n·u)* (n vTPMs, u updates each).

The unit has one SHA-512, one divider and one multiplier. It uses them one
after the other:

| unit | method | clocks here | proposal |
|---|---|---|---|
| `sha512_core` | one round per clock + final add | 81 | 81 |
| `modmul_interleaved` | MSB-first shift-and-add; per bit: double, reduce, add, reduce | 4K+4 = 2052 | 2053 |
| `moddiv_binary` | binary extended Euclid, one step per clock | data dependent, ≈1070 on random operands, at most 4K+4 | 1563 |

For K = 512, an add takes 2138 clocks. An update takes 3270 to 3320
(measured). The multiplier and divider expect an odd *m* above 2^(K−1), because each input
is reduced with a single conditional subtraction. A hash that is 0 mod *m*
cannot be divided by. The unit reports this as `INC_ST_ERR_ZERO` and leaves the
PCR unchanged.

## Top-level ports

`vtpm_binding_top` (parameters `NUM_PCR = 24`, `SHA1_LATENCY = 175`):

| port | dir | meaning |
|---|---|---|
| `lpc_valid`, `lpc_data[31:0]`, `lpc_ready` | in/in/out | command blocks from the bus interface |
| `ht_rsp_valid`, `ht_rsp` | out | one answer per hash-tree command: status, PCR_i |
| `setup_we`, `setup_idx`, `setup_value` | in | write a tree root into a SHA-1 PCR |
| `ht_rd_idx`, `ht_rd_value` | in/out | read a SHA-1 PCR (for the TPM's quote/signing logic) |
| `inc_req_valid`, `inc_req`, `inc_req_ready` | in/in/out | incremental-hash request |
| `inc_rsp_valid`, `inc_rsp` | out | its answer: status, new PCR_i |
| `inc_rd_idx`, `inc_rd_value` | in/out | read a 512-bit PCR |

The structs and enums are in `rtl/vtpm_pkg.sv`. Reset is asynchronous and
active low.

## What is not here

* **The LPC bus interface.** It is a standard interface. The proposal takes
  only its timing. `tb/lpc_dma_model.sv` models that timing for simulation.
* **The TPM's signing engine**, which signs PCR values during attestation,
  and the rest of the TPM. The PCR read ports are where they would connect.
* **A bus command for the incremental scheme.** None is defined, so its
  requests use a separate port.
* **The serial variant** (one SHA-1 doing both paths one after the other).
  The proposal uses it only for comparison; it costs 175 extra clocks per
  level.
* **Verification at the remote challenger.** That is software.

## Simulating

Every block has a self-checking testbench in `tb/`. It ends with a
`TB_RESULT checks=N failures=M` line. The reference models in
`tb/tb_ref_pkg.sv` (SHA-1, SHA-512, modular multiply and inverse, tree path)
are written separately from the RTL. The SHA models are checked against the
standard "abc" test vectors. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/vtpm_pkg.sv tb/tb_ref_pkg.sv tb/tb_vtpm_binding_top.sv \
    --top-module tb_vtpm_binding_top -Mdir obj_top
./obj_top/Vtb_vtpm_binding_top
```

Replace the testbench name to run another one: `tb_sha1_core`,
`tb_sha512_core`, `tb_ht_datapath`, `tb_pcr_bank`, `tb_ht_controller`,
`tb_tpm_cmd_parser`, `tb_modmul_interleaved`, `tb_moddiv_binary`,
`tb_inc_hash_unit`, `tb_ht_tree_1024`, `tb_inc_binding_32`. All of them use
the default sizes (512-bit modulus, 175-clock SHA-1, 24 PCRs). Each simulates
in under a second; building the 512-bit blocks takes Verilator about 20
seconds.

The top-level test runs the heights 2, 10 and 20 through the bus model. For height 10 it uses the example Init block with PCR 5 (the example
prints only 16 of each digest's 20 bytes; the last 4 are taken as 00). It
also runs a tampered tree, the refusals, and the incremental operations while
a tree update is in progress. It counts each of these events and fails if one
never happens.

`tb_ht_tree_1024` runs the case of a fully populated platform: 1024 vTPMs on
a tree of height 10. The host model holds the whole tree and changes eight
leaves, including the first and the last. Each change must end with the
host's new root in the PCR and take 5091 clocks.

`tb_inc_binding_32` binds 32 vTPMs to one 512-bit PCR and extends eight of
them. Then, acting as the remote verifier, it replays the update log from the
initial product and must reach the PCR value. It also checks the point made
above: after extends, the PCR is no longer the plain product over the current
vPCRs.
