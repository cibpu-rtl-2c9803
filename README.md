# CIBPU — a conflict-invisible secure branch prediction unit in SystemVerilog

Branch predictors are shared by every thread and every privilege level that runs on a core, and
they are indexed by a few compressed bits of the branch address. Both facts let one program observe
or steer another through *branch conflicts*: an attacker can plant a target or a direction that the
victim will reuse (reuse-based attacks such as Spectre-BTB or BranchScope), or evict a victim entry
from a set it knows and watch for the eviction (eviction-based attacks such as JUMP or Prime+Probe on
the BTB). Earlier defences either partition or flush the predictor, which costs prediction accuracy,
or encrypt it with per-thread keys that must be re-randomised thousands of times per second.

The conflict-invisible BPU hides the conflicts themselves, so that no key ever has to change:

* **Keys that are a function, not a state.** Every index and content key is computed in hardware
  from a device secret, the thread ID and the branch PC. Nothing is stored per thread and software
  never sees a key.
* **Two-level encryption.** Both the *index* of a table entry and its *content* (tag and stored
  state or target) are encrypted. An entry written by one thread lands somewhere else, and decrypts
  to garbage, for another.
* **CIPHT.** The pattern history table is kept three times, in three *skews* with independent keys.
  A branch hits only if all three skews agree, which multiplies the work of a reuse attack.
* **CIBTB.** The BTB separates tags from targets, in the way of a V-way cache. It gives every set 5
  spare tag slots on top of the usual 8. It places a new branch in the emptier of two candidate sets,
  one per skew, and it evicts globally: of two random targets, it drops the one whose owning set is
  fuller. Sets therefore almost never fill up, so a new branch almost never has to evict a neighbour
  from its own set. That in-set eviction is the event an eviction attack needs.

This repository gives synthesizable RTL for that unit: the key generator, the encryption, CIPHT,
CIBTB, the random-number source and a top level that joins them. Self-checking testbenches come with
it.

## Block structure

```
                    puf_secret (128)           rnd0   rnd1
                         |                      ^      ^
             +-----------+-----------+    cibpu_prng  cibpu_prng
             |                       |          |      |
 pred_*  --> | cipht                 |   cibtb  v      v          | --> pred_btb_hit, pred_target
 upd_*   --> |  3 skews x 8192       |   Tag-Store 2 x 2048 sets  |
             |  {valid,tag12,ctr2}   |     x 13 {valid,tag12,FPTR}|
             |  cibpu_enc x 6        |   Target-Store 32768       |
             |   (keygen x 12)       |     {valid,target48,RPTR}  |
             +----------+------------+   cibpu_enc x2, keygen x2  |
                        |                                          |
           pred_pht_hit, pred_taken, pred_ctr         ev_* update events
```

| file | what it is |
|---|---|
| `rtl/cibpu_pkg.sv` | widths, key domains, the add-rotate-xor round, popcount |
| `rtl/cibpu_keygen.sv` | key = F(secret, thread ID, PC, domain) |
| `rtl/cibpu_enc.sv` | one skew's index, tag and content pad (Enc.I, Enc.C, Dec.C) |
| `rtl/cibpu_prng.sv` | xorshift random source for the BTB replacement |
| `rtl/cipht.sv` | three-skew encrypted PHT |
| `rtl/cibtb.sv` | two-skew decoupled BTB with load-balancing index and replacement |
| `rtl/cibpu_top.sv` | the unit: CIPHT, CIBTB, two random sources |

## Keys and the two levels of encryption

`cibpu_keygen` maps (128-bit secret, 16-bit thread ID, 48-bit PC, 8-bit domain) to a 64-bit key
through four SipHash-style add-rotate-xor rounds. It is purely combinational. The domain byte keeps
the keys apart: bit 7 is BTB/PHT, bit 4 is content/index, and the low bits are the skew. So the
design has eight keys per (thread, PC): `Enc.I0..2` and `Enc.C0..2` for the PHT, and `Enc.I0`,
`Enc.I1`, `Enc.C` for the BTB.

`cibpu_enc` turns two of those keys into what a table needs:

* index = low bits of (PC xor index key);
* tag = low 12 bits of (PC xor content key);
* pad = top bits of the content key. The stored content is `plain xor pad`, and the same xor on the
  way out decrypts it. The pad is 2 bits for a PHT counter and 48 bits for a BTB target.

The key depends on the PC as well as the thread, so the index is a keyed hash of the PC. Two
branches of the same thread that collide in one skew are unlikely to collide in another. A branch of
another thread at the same PC gets unrelated indices, tags and pads. The published design leaves the
key function itself open. SipHash rounds are this design's choice, and any keyed pseudo-random function
with the same ports can replace them.

## CIPHT: three skews that must agree

Each skew is a direct-mapped table of 2^13 entries. Each entry holds {valid, 12-bit encrypted tag,
2-bit encrypted counter}.

* **Lookup.** All three skews are read at their own encrypted index. The branch hits only when all
  three hold a valid entry with its tag. The counter of skew 0 is decrypted and gives the prediction:
  2 and 3 mean taken, 0 and 1 mean not taken. On a miss the unit has no opinion, and the core's base
  predictor decides.
* **Update on a hit.** Each skew decrypts its counter. The counter is incremented on taken and
  decremented on not taken, saturating at 3 and at 0, then encrypted again and written back.
* **Update on a miss.** The branch is written into all three skews at once with a fresh counter.
  The fresh counter is 2 if the branch was taken and 1 if it was not. This keeps the skews in step
  for the branch's own entries.

Because the counter pad depends on the PC, a tag alias (a different branch whose tag matches by
chance) reads a counter that decrypts to an unrelated value. This is intended behaviour, and the
testbench models it.

## CIBTB: decoupled tags, load-balancing index, global replacement

This is the part that carries the security argument against eviction attacks, and the part with the
most state.

**Storage.** The Tag-Store has 4096 sets: skew 0 is sets 0–2047 and skew 1 is sets 2048–4095. Each
set has 13 slots, 8 "base" and 5 "extra". A slot holds {valid, 12-bit tag, 15-bit FPTR}. The
Target-Store has 4096 × 8 = 32768 entries, each {valid, 48-bit encrypted target, RPTR}. RPTR is the
12-bit set and 4-bit slot of the owning tag. Every valid target is owned by exactly one valid tag,
and that tag's FPTR points back at it. There are 53248 tag slots for 32768 targets, so on average
5 slots per set stay invalid.

**Lookup and Algorithm 1 (load-balancing index).** The PC gives one set in each skew, through
index keys 0 and 1, and one tag, through the content key. A tag match in either set is a hit. The
FPTR of the matching slot selects the target, which is decrypted with the content pad. On a miss,
the set with fewer valid tags becomes the *final set*; skew 0 wins a tie.

**Algorithm 2 (load-balancing replacement).** Two random Target-Store entries, `rand0` and `rand1`,
are the candidates. For each, the number of valid tags in the set its RPTR names is counted. The
candidate from the fuller set is chosen; `rand0` wins a tie. Its owning tag is invalidated,
wherever it is. This is a *secure eviction* (SE): it removes a branch from a set unrelated to the
new one. The new tag takes the lowest free slot of the final set, and the target entry is
rewritten with the new target and RPTR.

**Dangerous eviction (DE).** A DE occurs only if the final set has no free slot. Because of
Algorithm 1, that means both candidate sets are full. The unit then overwrites slot
`rand0 mod 13` of the final set and reuses its target entry. This is the only way a branch can
push out a branch of its own set, which is what an eviction-set attack observes. With 13 slots
and 8 targets per set on average, the occupancy of a set stays narrowly around 8. The full-size
testbench inserts 2,000,000 random branches and sees no DE. Sets hold between 5 and 11 valid tags,
the same narrow shape that the analysis behind the design predicts.

**Warm-up.** While the Target-Store still has invalid entries, an invalid candidate is used first
and nothing is evicted. This is reported as a *fill*.

**Target change.** A hit whose branch now has a different target (an indirect jump) overwrites the
stored target.

Each update reports exactly one of `up_hit`, or `up_miss` together with one of `up_fill`, `up_se` or
`up_de`. An immediate assertion checks, at each secure eviction, that the victim's RPTR points at a
valid tag whose FPTR points back.

## Interface and timing of `cibpu_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (clears all valid bits, reseeds the random sources) |
| `puf_secret` | in | 128 | device secret; in silicon the output of a PUF |
| `pred_valid`, `pred_pc`, `pred_tid` | in | 1, 48, 16 | prediction request |
| `pred_resp_valid` | out | 1 | high one cycle after `pred_valid` |
| `pred_pht_hit`, `pred_taken`, `pred_ctr` | out | 1, 1, 2 | CIPHT answer (`pred_taken` only meaningful on a hit) |
| `pred_btb_hit`, `pred_target` | out | 1, 48 | CIBTB answer |
| `upd_valid`, `upd_pc`, `upd_tid` | in | 1, 48, 16 | a resolved branch |
| `upd_is_cond`, `upd_taken`, `upd_target` | in | 1, 1, 48 | conditional branches train CIPHT; taken branches (any kind) train CIBTB |
| `ev_pht_hit`, `ev_pht_alloc` | out | 1 | CIPHT update found / allocated the branch |
| `ev_btb_hit`, `ev_btb_miss`, `ev_btb_fill`, `ev_btb_se`, `ev_btb_de` | out | 1 | CIBTB update report |

Timing:

* A prediction is answered one cycle after it is requested. The answer is registered, and the
  tables are read without a clock.
* An update takes effect at the clock edge that ends its cycle. The `ev_*` outputs are
  combinational in that same cycle.
* A prediction and an update may be issued in the same cycle. The prediction then sees the tables
  as they were before the update.
* One prediction and one update can be accepted every cycle. The BTB's hit search, the two set
  counts, the two candidate lookups and their set counts all happen within one cycle.

This timing is the simplest correct one, not a pipelined implementation. A fast core would split
the replacement path over two or three stages. It would also map the arrays to SRAM macros, keeping
only the valid bits, which are read as whole sets, in flip-flops.

## Parameters

| parameter (module) | default | meaning |
|---|---|---|
| `PHT_IDX_W` (`IDX_W` in cipht) | 13 | index bits per PHT skew (8192 entries) |
| `PHT_TAG_W` | 12 | PHT tag bits |
| `NUM_SKEWS` (cipht) | 3 | PHT skews |
| `BTB_SET_W` (`SET_W` in cibtb) | 11 | index bits per BTB skew (2 × 2048 = 4096 sets) |
| `BTB_BASE_WAYS` | 8 | base tag slots per set; also targets per set (32768 targets) |
| `BTB_EXTRA_WAYS` | 5 | extra tag slots per set |
| `BTB_TAG_W` | 12 | BTB tag bits |
| `RNG_SEED0/1` | constants | xorshift seeds (non-zero) |

PC (48), thread ID (16), secret (128) and key (64) widths are in `cibpu_pkg`. BASE_WAYS × 2 ×
2^SET_W must be a power of two, because the random candidates are raw bits. At the defaults the
unit stores 3 × 8192 × 15 bits of PHT (45 KiB), 4096 × 13 × 28 bits of tags (182 KiB) and
32768 × 65 bits of targets (260 KiB).

## How far this follows the source design

Taken from the published description:

* the three-skew PHT and its all-skews-must-hit rule;
* the replace-all-skews-on-miss rule and the 2-bit counter rules;
* the PC-xor-key index and tag;
* the decoupled Tag-/Target-Store with FPTR/RPTR;
* the 8 + 5 slots per set and the two skews;
* Algorithms 1 and 2, tie-breaks included;
* the sizes: PHT index 13 and tag 12, BTB 4K sets, tag 12, target 48, 8 targets per set.

Two sizes conflict in the source. It lists a 4K TAGE PHT and an "8K, 8-way" BTB for its gem5 and
FPGA setups, but gives 13 index bits and 4K sets × 8 targets as the defaults of its security
analysis. This RTL uses the latter.

Choices of this design, where the description is silent:

* the key-derivation function and its widths;
* which key bits form index, tag and pad;
* direct-mapped PHT skews;
* the counter value of a new PHT entry;
* the use of free targets before evicting;
* the lowest-free-slot rule;
* what a dangerous eviction overwrites;
* rewriting a changed target;
* installing only taken branches;
* the port list and one-cycle timing;
* an xorshift generator in place of a true secure random number generator.

Not built:

* the physically unclonable function that provides the secret;
* the host core;
* the TAGE history tables that would sit around CIPHT in a real predictor.

CIPHT is one tagged table indexed by the PC. Folding global history into `pred_pc`/`upd_pc` before
the unit is the natural way to use it as a TAGE component.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cibpu_pkg.sv tb/cibpu_ref_pkg.sv \
          tb/tb_cibtb.sv --top-module tb_cibtb -Mdir obj_cibtb && obj_cibtb/Vtb_cibtb
```

| testbench | what it checks |
|---|---|
| `tb_cibpu_keygen` | known-answer keys from an independent software model; thread ID, PC and domain all change the key |
| `tb_cibpu_enc` | known-answer index/tag/pad; decryption inverts encryption |
| `tb_cibpu_prng` | xorshift sequence, enable, reset |
| `tb_cipht` | reference model of all three skews (16-entry skews): hit rule, counters, replacement, aliasing, 1-cycle latency |
| `tb_cibtb` | reference model of both stores (4 sets per skew, 2 + 1 slots, 16 targets): Algorithms 1 and 2, fills, secure and dangerous evictions, target changes |
| `tb_cibpu_top` | two threads on a small unit; per-branch models; every mechanism counted and required |
| `tb_cibpu_top_full` | default sizes: two threads' branches installed and predicted, cross-thread isolation, then 2,000,000 random insertions with no dangerous eviction, every set holding 4 to 12 valid tags, a tag/target count invariant and the per-set occupancy histogram |
| `tb_cibpu_reuse_attack` | default sizes: a victim thread trains 64 branches, an attacker thread retrains the same PCs not-taken and towards a marked malicious target, then floods 20,000 insertions; the victim never receives an attacker target, never hits in the PHT on attacker-only PCs, the attacker never reads a victim target, and surviving victim entries keep their targets |

`tb/cibpu_ref_pkg.sv` is the testbenches' own model of the key function and the encryption. It is
written separately from the RTL and tied to the same known answers.
