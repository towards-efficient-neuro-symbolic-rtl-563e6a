# A tiled accelerator for vector-symbolic reasoning

Vector-symbolic architectures (VSA, also called hyperdimensional computing) represent symbols as
very long random binary vectors ("hypervectors"). Three cheap operations build structure from them.
**Binding** is an element-wise product: XOR for binary vectors. It ties two symbols into one vector
that looks unrelated to either of them. **Bundling** is an element-wise majority. It makes a vector
that resembles all of its inputs. **Permutation** is a fixed reordering, used to mark position in a
sequence. Reasoning then comes down to one more operation: finding the stored vector most similar
to a query (a "clean-up" or nearest-neighbour search).

On a CPU or GPU these workloads run slowly. They are long, bit-level, low-arithmetic-intensity
streams with a lot of control flow. This accelerator is built for exactly those streams:

* **Memory-side tiles.** Each tile keeps its own share of the codebooks in a local SRAM. It computes
  similarities right next to that SRAM, so codebook vectors never cross a global bus during a search.
* **Folding.** A hypervector longer than the W-bit datapath is processed as a sequence of W-bit
  *folds*. Only the first fold (the *seed*) of each codebook vector must be stored. Later folds are
  regenerated on the fly by a rule-90 cellular automaton.
* **One shared encoder.** A vector-operation (VOP) unit does binding, weighted bundling and
  thresholding for the whole chip.
* **Wide instruction word.** Each 76-bit word drives all seven pipeline stages at once. A compiler
  can run the pipeline fully overlapped, or one stage at a time when it is not sure of dependences.

The SystemVerilog here implements the whole accelerator in its largest published configuration:
8 tiles, a 512-bit bus and 512 KB of SRAM. The exceptions are the host processor and the compiler
that feed it.

## Block map

```
                 +-------------------- control unit (7-stage Instruction Word pipeline,
                 |                     tile-enable and SOPC/MOPC configuration registers)
                 v
 tile 0 .. K-1 (all in lock step)                       shared
 +-------------------------------------------+
 | write buffer -> local SRAM -> REG          |   vector-symbolic datapath (W bits)
 |                      |        |            |  CA of src_tile ------------------> VOP in buffer
 |                      +-> QRY  v            |                                      |
 |   CA-90 RF  <----->  CA-90 (rule 90)  ---- |---------------+                      BIND (xor, rotate)
 |                         |                  |                                      MULT (x weight)
 |            QRY ---> POPCNT <---+           |                                      BND  <-> BND RF
 |                         v                  |                                      SGN
 |                      DSUM RF --------------|--> scalar datapath: ARGMAX,          VOP out buffer
 +-------------------------------------------+     MULT weight, scalar_out            |
        ^                                                                            |
        +---------------- write-back (VOP out, BIND register, ARGMAX result) <-------+
```

| Part | Module | What it holds |
|---|---|---|
| Tile | `vsa_tile` | Write buffer, `vsa_sram` (REG is its registered read port), QRY, `vsa_ca90`, `vsa_ca90_rf`, `vsa_popcnt`, `vsa_dsum_rf` |
| ARGMAX | `vsa_argmax` | Running maximum over all enabled tiles' DSUM values |
| VOP | `vsa_vop` | Input buffer, `vsa_bind`, `vsa_mult`, `vsa_bnd`, `vsa_bnd_rf`, `vsa_sgn` with the output buffer |
| Control | `vsa_ctrl` | Seven stage registers of Instruction Words, issue throttle, configuration registers |
| Top | `vsa_top` | The above, plus the two global datapaths and the write-back multiplexer |
| Package | `vsa_pkg` | Sizes, instruction layout, operation encodings |

## The Instruction Word

The Instruction Word is the hardest part of the design to grasp. Each 76-bit word holds one
operation field per pipeline stage, plus shared parameters:

| Bits | Field | Width | Used by stage |
|---|---|---|---|
| 75:19 | OP_PARAM | 57 | all |
| 18:16 | Type_7 | 3 | 7 memory write |
| 15:13 | Type_6 | 3 | 6 ARGMAX |
| 12:10 | Type_5 | 3 | 5 MULT / BND / BND RF / SGN |
| 9:8 | Type_4 | 2 | 4 BIND |
| 7:5 | Type_3 | 3 | 3 POPCNT / DSUM RF |
| 4:2 | Type_2 | 3 | 2 CA-90 / CA-90 RF |
| 1:0 | Type_1 | 2 | 1 memory read |

Each word moves down the pipeline one stage per cycle. In stage *k* it performs its Type_*k*
operation, using its own OP_PARAM. The published design gives the field widths and their order;
this design chose their exact bit positions. Code 0 is a no-op in every field. The all-zero word is
therefore a NOP, and a word may use any subset of the stages.

OP_PARAM is cut into these sub-fields:

| Bits | Name | Meaning |
|---|---|---|
| 56:52 | `am_tag` | Upper 5 bits of the ARGMAX index. The lower bits are the tile number, so 32 × K candidates can be told apart. |
| 51:49 | `wshift` | Arithmetic right shift applied to the MULT weight |
| 48 | `wsel` | MULT weight source: 0 = `weight` immediate, 1 = DSUM[`ds_idx`] of tile `src_tile` |
| 47:36 | `weight` | Signed 12-bit immediate weight |
| 35:33 | `bnd_idx` | BND RF register |
| 32:30 | `ds_idx` | DSUM register: written in stage 3, read in stages 5 and 6 |
| 29 | `ca_wr` | Also store the new CA value in CA-90 RF[`ca_idx`] |
| 28:26 | `ca_idx` | CA-90 RF register |
| 25:23 | `dst_tile` | Tile written by the `*_ONE` write operations |
| 22:20 | `src_tile` | Tile whose CA output feeds the VOP, and whose DSUM feeds the weight or `scalar_out` |
| 19:10 | `wr_addr` | SRAM write address |
| 9:0 | `rd_addr` | SRAM read address, the same in every enabled tile |

Operations per field (full comments are in `rtl/vsa_pkg.sv`):

| Field | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|
| Type_1 | READ: REG ← SRAM | QRY: REG ← SRAM, then QRY ← REG | — | | | | |
| Type_2 | PASS: CA ← REG | GEN: CA ← r90(REG) | STEP: CA ← r90(CA) | RF: CA ← RF | RFSTEP: CA ← r90(RF) | — | — |
| Type_3 | CLR one DSUM | SET: DSUM ← sim | ACC: DSUM ← sat(DSUM + sim) | CLRALL | — | — | — |
| Type_4 | LOAD: ACC ← buf | XOR: ACC ← ACC ⊕ buf | PERM: ACC ← rotate(ACC) | | | | |
| Type_5 | LOAD: BND ← w·ACC | ACC: BND ← sat(BND + w·ACC) | RFLOAD | RFACC | STORE | CLR | SGN: out ← sign(BND) |
| Type_6 | CLR | UPD | START (CLR + UPD) | SCALAR | — | — | — |
| Type_7 | SGN_ONE | SGN_ALL | BIND_ONE | BIND_ALL | AM_ONE | — | — |

Here `sim` is the similarity of QRY with the CA output (see below), and `w·ACC` maps each bit to
±w. The VOP input buffer is loaded in stage 3 from the CA output of `src_tile`, whenever the word's
Type_4 is LOAD or XOR. AM_ONE writes `{am_val, am_idx}`, zero-extended to W bits. This lets a
program keep the winner of a search for later use.

## Pipeline timing and the two control methods

```
cycle      t     t+1    t+2    t+3    t+4    t+5    t+6    t+7
word n    READ   CA90   DSUM   BIND   VOP5   AMAX   WRITE  (SRAM updated)
word n+1         READ   CA90   DSUM   BIND   VOP5   AMAX   WRITE
```

**MOPC** (multiple operations per cycle) issues one word per cycle, so all seven stages are busy at
once. A program of N words finishes in N + 7 cycles.

**SOPC** (single operation per cycle) issues a word only when stages 1–6 are empty. Only one stage
works in any cycle, and N words take 7(N−1) + 8 cycles. The program is the same in both modes:
SOPC just removes every overlap between words. That makes it safe for code whose dependences were
never analysed. The published design describes SOPC only by its effect, one active stage per
cycle; the issue throttle is this design's way of getting that effect. Switch modes with `cfg_we`
while `busy` is low. An assertion flags a configuration write made while words are in flight.

There is no hazard detection or forwarding. This matches the published design, which leaves
dependence analysis to the compiler. In MOPC these spacing rules apply. In SOPC all of them hold
automatically, except the first:

| Producer → consumer | Rule |
|---|---|
| Type_7 write → Type_1 read of the same address | The write passes the write buffer and lands one cycle after stage 7. The reading word must be issued **at least 8 words later**; the testbenches leave 8 NOP words in between. *This also applies in SOPC* if the two words are adjacent: the write lands at the end of the cycle after stage 7, and in SOPC the next word's read happens in that same cycle. |
| BIND result → Type_7 `BIND_*` write of it | The next **2 words** must not use Type_4; the testbenches leave 3. |
| SGN → Type_7 `SGN_*` write of it | The next word must not use Type_5 SGN. |
| DSUM write (stage 3) → MULT weight or ARGMAX (stages 5, 6) | No gap needed: the read is later in the pipeline than the write. |
| Type_1 QRY → POPCNT of a later word | No gap needed. |
| DSUM read (stage 5 or 6) → a later Type_3 write of the same register | The writing word must come **at least 2 words** after a stage-5 (MULT weight) reader and **at least 3 words** after a stage-6 (ARGMAX, SCALAR) reader. |

I/O timing:

* `instr_valid`/`instr_ready` is a plain valid/ready handshake. A word transfers in a cycle where
  both are high.
* `scalar_valid` pulses for one cycle when a SCALAR word leaves stage 6. `scalar_out` holds that
  value.
* `am_val`/`am_idx`/`am_valid` show the running ARGMAX state. It updates at the end of each UPD
  word's stage 6.

## Folds and on-the-fly generation (MCG subsystem)

A D-bit hypervector is handled as ⌈D/W⌉ folds. A similarity over the whole vector is the sum of the
per-fold similarities; the DSUM registers hold these running sums.

Storing every fold of every codebook vector would be costly. Instead, fold *j+1* is made from fold
*j* by one step of cellular automaton rule 90:

```
new[i] = old[i-1] XOR old[i+1]      (indices modulo W, so the vector is a ring)
```

Rule 90 spreads a random seed into sequences of folds that are nearly independent. The published
design uses it for exactly this purpose, so a tile only needs the seed fold in SRAM. The ring
boundary is this design's choice; the source does not say how the end bits are handled.

CA-90 RF (R registers) caches generated folds. A program that needs the same fold twice, such as
a similarity pass followed by a bundling pass over the same codebook, reloads it (`T2_RF`) instead
of re-stepping the automaton. `T2_RFSTEP` steps from a cached fold, which extends a chain without
recomputing its start.

Rule 90 is linear over XOR: r90(a ⊕ b) = r90(a) ⊕ r90(b). The folds of a bound vector can therefore
be generated from the bound seed. The end-to-end testbench relies on this property.

## Similarity search (DC subsystem and ARGMAX)

For binary vectors read as bipolar values (bit 0 = +1, bit 1 = −1), the dot product of two folds is

```
sim(q, c) = W − 2 · popcount(q XOR c)       (range −W … +W, 11 bits for W = 512)
```

`vsa_popcnt` computes this value for QRY against the CA output. Type_3 SET or ACC stores it in one
of the D DSUM registers, with 12-bit saturation at −2048/+2047. A saturation raises `dsum_ovf`
for that tile.

The published text describes POPCNT with the opposite sign: ones minus zeros of the XOR. That
contradicts its own kernel definition, which is an argmax of dot products. This design follows
the dot product, so a larger value means more similar and ARGMAX picks the nearest item.

ARGMAX compares the DSUM[`ds_idx`] values of all enabled tiles in one cycle and keeps the largest
value it has seen since its last CLR or START. Only a strictly larger value replaces the current
best, so ties go to the earlier step and, within one step, to the lower tile. A codebook of
M > K entries is searched in ⌈M/K⌉ UPD steps. Each step uses a different DSUM register or SRAM
address, and its own `am_tag`, so the final `am_idx = {am_tag, tile}` names the winning entry.

## Encoding (VOP subsystem)

* **BIND** holds a W-bit accumulator. LOAD and XOR take the input buffer. PERM rotates the
  accumulator by one position: element *i* moves to *i+1*, and the top element wraps to 0.
* **MULT** turns each accumulator bit into ±w with w = clamp(weight >>> wshift, ±(2^(H−1)−1)).
  The weight is either an immediate or a DSUM value arriving over the scalar datapath. The second
  case is what a resonator-network projection needs: the sum over i of sim(a_i, x)·a_i.
* **BND** holds W signed H-bit (8-bit) counters. It adds each MULT result and clamps every
  counter at ±127; a clamp raises `bnd_ovf`. A clamped counter keeps its sign, so the majority
  survives, only with reduced confidence. The B registers of BND RF save and restore partial
  bundles.
* **SGN** thresholds the counters: negative → 1, otherwise 0, so a tie reads as +1. The result goes
  to the output buffer (a register inside `vsa_sgn`), which drives `vec_out` and the Type_7 `SGN_*` writes.

The arithmetic between these units is this design's own. This covers the shift-and-clamp weight
scaling, the symmetric clamp and the tie rule. The published design gives only the unit names, the
8-bit counter width and the 12-bit distance width.

## Writing programs: the kernels as word sequences

Three kernels cover the target workloads, and each maps to a short run of words:

* **Encoding**, e.g. x1 ⊗ ρ(x2) ⊗ ρ²(x3), is evaluated inside out, Horner-style, using the fact
  that ρ distributes over XOR. The program loads x3 (READ + PASS + Type_4 LOAD), rotates
  (Type_4 PERM), XORs in x2, rotates again, then XORs in x1. A plain bind sequence x1 ⊗ x2 ⊗ …
  is just LOAD then XORs, and ρ^j(x) is j PERM words. The bundle of such terms adds a Type_5
  LOAD or ACC to each term's last word and ends with one SGN word. Type_7 then writes the result
  to one tile or to all of them.
* **Weighted projection**, c = Σ n_i·y_i with n_i = d(y_i, ȳ), first computes the similarities
  into DSUM. It then streams the y_i once more through BIND with `wsel` = 1, so each fold is
  scaled by its own DSUM value on the way into BND. `wshift` brings a similarity of up to ±W
  into the ±127 range of the counters.
* **Nearest-neighbour search**, argmax_i d(y_i, ȳ), starts by broadcast-writing the query to
  every tile. Then, for each fold k, one word loads query fold k into QRY in every tile (Type_1
  QRY). It is followed by one word per block of K candidates. That word reads the candidate
  row, or regenerates the fold with CA-90, and does SET (k = 1) or ACC (k > 1). Finally, one
  Type_6 word per block of K candidates feeds ARGMAX.

The MOPC speed-up of a program depends on how many gap words its dependences force (see the
table above). A program run in SOPC needs no gaps, except for an adjacent memory write followed
by a read. The published evaluation measures a 1.8–2.3× MOPC speed-up on resonator programs.
The testbench programs keep their gap words in both modes, so they show a larger ratio, about
6.5×.

## Tiles, configuration and the host port

All enabled tiles run stages 1–3 in lock step, on the same address and the same operation. The
tile-enable register (`cfg_tile_en`, all ones after reset) removes a tile from reads, CA and DSUM
updates, ARGMAX and `*_ALL` writes. Use it for a codebook that does not fill every tile.

Targeted `*_ONE` writes and host writes still reach a disabled tile. The host loads codebooks with
`host_we`/`host_tile`/`host_addr`/`host_data`. These writes are accepted only while `host_ready`
is high, which requires that no instruction is in flight and no pipeline write is pending.

The bidirectional bus of the published diagram is built as two one-way W-bit paths: tile → VOP in
stage 3, and VOP/ARGMAX → tiles in stage 7. This way, two words in flight never compete for it.

## Parameters and sizes

| Parameter | Default | Meaning |
|---|---|---|
| `W` | 512 | Bus and fold width |
| `K` | 8 | Tiles |
| `R` | 8 | CA-90 RF registers per tile |
| `B` | 8 | BND RF registers |
| `D` | 8 | DSUM registers per tile |
| `C` | 12 | Distance width |
| `H` | 8 | Bundling counter width |
| `DEPTH` | 1024 | Words per tile SRAM (8 × 1024 × 64 B = 512 KB) |

The three published configurations differ only in K = R = B = D: 2, 4 or 8. The 2- and 4-tile
versions are obtained by setting those parameters; DEPTH stays at 1024 (64 KB per tile). The fixed
OP_PARAM layout caps K, R, B and D at 8, DEPTH at 1024 and C at 12; an elaboration-time assertion
checks these limits.

For scale: the evaluated workloads store at most a few hundred codebook vectors. Even at 2048 bits
(4 folds) per vector, that is under 2,300 of the 8,192 SRAM words. A 4-fold similarity (±2048)
just reaches the DSUM saturation limit. At 10,000-bit dimensions (20 folds), near-perfect matches
saturate, but ranking among the imperfect ones is unaffected.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against values computed
independently inside the testbench and ends with a `TB_RESULT checks=… failures=…` line.

* `tb_vsa_top` runs the accelerator end to end at W = 128, K = 4, DEPTH = 64.
* `tb_vsa_top_full` runs the same program with every parameter at its default.

That program decodes one resonator-network step (x = s ⊕ b̂ ⊕ ĉ), computes two-fold similarities
with CA-generated and RF-cached folds, projects with DSUM-weighted bundling, and runs a clean-up
search with ARGMAX write-back. It also does a permuted binding and a deliberate DSUM saturation.
It runs the whole sequence in MOPC, then again in SOPC, then repeats the search with one tile
disabled.

Checks include:

* SRAM contents and ARGMAX results against a software model
* exact cycle counts: N + 7 cycles in MOPC and 7(N−1) + 8 in SOPC
* that each mechanism occurred at least once: DSUM saturation, BND clamp, CA generation, CA-RF
  reuse, permutation, ARGMAX, scalar read-out, tile disable, broadcast write, scalar-weighted MULT

`tb_vsa_workloads` runs four complete applications at the default size. Each uses one 512-bit
fold per vector and is driven only by Instruction Words:

* **Classification.** 120 item vectors (8 feature keys, 112 level vectors), 300 training samples
  encoded as records and bundled into 16 class prototypes, and 100 queries, each searched in two
  ARGMAX steps. 99 of 100 queries are classified correctly.
* **Key-action recall.** One bundled memory of 15 key ⊕ action pairs, 40 actions spread over the
  tiles, and 160 recalls, each an unbinding followed by a 5-step search. All 160 return the right
  action.
* **Tree search.** 70 depth-two trees whose leaf paths are encoded as ρ(role) ⊕ role, and 400
  leaf queries over 9 items. All 400 return the right item.
* **Factorization.** A resonator network over two factors with 8-entry codebooks. It factors 10
  composites a ⊕ b in 6 iterations each, with similarity weights taken over the scalar datapath.
  All 10 are factored correctly.

Every stored vector and every search result is compared with the testbench's model, so the
hardware must match it exactly, not just be accurate.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl --top-module tb_vsa_top_full \
    rtl/vsa_pkg.sv tb/tb_vsa_top_full.sv
./obj_dir/Vtb_vsa_top_full
```

Verilator finds the other modules in `rtl/` by name; change the top module and testbench file to run any other testbench. `tb_vsa_top_full` builds and
runs in well under a minute.

## Where this design departs from, or goes beyond, the published one

* All operation encodings, the bit order of the Instruction Word, and the split of OP_PARAM are
  invented here. The original gives only field names and widths.
* POPCNT uses the dot-product sign (zeros minus ones). The original text states the opposite sign,
  in conflict with its own kernel definition.
* SOPC is built as issue throttling. Permutation is a one-step rotation placed in BIND. CA-90 uses
  a ring boundary. MULT uses shift-and-clamp weights. BND uses a symmetric clamp. SGN treats a tie
  as +1. None of these is specified in the original.
* The single bidirectional bus is split into two directions. Host loading goes through a separate
  port that is usable only while the pipeline is idle.
* The host CPU and the compiler, including the dependence analysis that MOPC programs need, are
  not part of this RTL. Testbenches play the host's role by writing Instruction Words directly.
* The SRAM is a behavioural array with one read and one write port, standing in for a memory macro.
