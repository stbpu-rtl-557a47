# STBPU — a branch predictor with per-process secret tokens

Branch predictors are shared. The branch target buffer (BTB), the pattern
history table (PHT) and the return stack buffer (RSB) are indexed by a few
bits of the branch address, hashed by a fixed function. One process can
therefore place a branch that lands on the same entry as another process's
branch. It can then read that branch's behaviour through the predictor
(a side channel), or steer the victim's speculative execution to a target of
its choosing (Spectre-style target injection). Flushing or partitioning the
predictor stops this, but it also throws away useful history.

The secret-token branch prediction unit (STBPU) keeps the predictor shared
and its history intact. Instead, it makes the *representation* of branches
private to each software entity:

* Every hardware thread holds a 64-bit **secret token (ST)**, loaded by the
  operating system with the running process.
* Every index, tag and offset is computed by a **keyed remapping function**
  whose key is half of the ST (`psi`). Each process thus sees its own
  branch-to-entry mapping. An attacker who does not know the victim's token
  cannot build a colliding branch on purpose.
* Every target stored in the BTB or RSB is **XOR-encrypted** with the other
  half of the ST (`phi`). If a collision happens anyway, the victim jumps
  speculatively to a random-looking address, not to the attacker's gadget.
* Collisions can still be found by brute force. So the unit **counts
  mispredictions and BTB evictions** per thread. When either count passes a
  threshold, it **replaces the thread's token** with a fresh random value.
  This silently retires everything the thread had trained, before an attacker
  can finish a search. The thresholds are set so that the fastest known
  attack needs many more events than a threshold allows.

The predictor this is applied to is a Skylake-like baseline:
* an 8-way, 4096-entry BTB;
* a 16k-entry PHT of 2-bit counters, with 1-level and 2-level (gshare-like)
  addressing;
* a 16-entry RSB per thread;
* per-thread global history (GHR) and branch history buffer (BHB).

The prediction algorithm itself is unchanged. Only the address mapping, the
stored data and the added token/monitor registers are new. So the accuracy
stays that of the baseline, apart from the history lost at each
re-randomization.

## Block overview

| module | role |
|---|---|
| `stbpu_pkg` | widths, branch-type / target-source / MSR enums, S-box tables |
| `st_remap` | one keyed remapping function (used for R1, R2, R3, R4) |
| `st_target_crypt` | target encryption before storing, decryption and 48-bit extension on prediction |
| `st_btb` | 512-set × 8-way BTB with tag, offset and encrypted 32-bit target per entry; eviction pulse |
| `st_pht` | 16k × 2-bit saturating counters |
| `st_rsb` | 16-entry circular return stack with overflow/underflow pulses |
| `st_history` | per-thread 16-bit GHR and 58-bit BHB |
| `st_token_regs` | per-thread 64-bit ST registers, privileged access, random reload |
| `st_rerand_monitor` | per-thread misprediction and eviction thresholds and down-counters |
| `stbpu_top` | the complete unit for `THREADS` hardware threads |

## Keyed remapping (R1–R4)

The four hash functions of the baseline are replaced as follows. The first
input of every function is the 32-bit key `psi`. The functions also take the
*full* 48-bit branch address, not a truncated one. Truncation is what lets
branches in one address space (kernel and user, for example) alias each
other.

| function | input | output | used for |
|---|---|---|---|
| R1 | psi(32) + address(48) = 80 bits | 22 bits: 9 index, 8 tag, 5 offset | BTB, address mode 1 |
| R2 | psi(32) + BHB(58) = 90 bits | 8 bits | BTB tag component, history mode 2 |
| R3 | psi(32) + address(48) = 80 bits | 14-bit PHT index | PHT, 1-level mode |
| R4 | psi(32) + GHR(16) + address(48) = 96 bits | 14-bit PHT index | PHT, 2-level mode |

A remapping must finish within one clock cycle: the baseline's hashes are
assumed to take at most one. So it cannot be a block cipher. Instead it is a
shallow substitution–permutation network, built in six stages. `st_remap`
implements it once, parameterised by input width `IN_W`, output width `OUT_W`
and a wiring selector `PBOX_C`.

1. **Substitution.** The input is zero-padded to a multiple of 8 bits and
   split into 4-bit nibbles. Each nibble passes through a 4→4 S-box. Two
   S-box tables are used, both from lightweight ciphers:
   * PRESENT: `C 5 6 B 9 0 A D 3 E F 8 4 7 1 2`
   * SPONGENT: `E D B 0 2 1 4 F 7 A 8 5 9 3 C 6`

   (input 0 to 15 in order). Stage 1 puts PRESENT in even nibble slots and
   SPONGENT in odd ones.
2. **Fold.** The upper half of the word is XORed onto the lower half. For R1
   this takes 80 bits to 40. This is the first, non-invertible compression
   step, so many inputs map to one value.
3. **Substitution** again, on the half-width word, with the slot assignment
   of stage 1 swapped: SPONGENT in even slots, PRESENT in odd ones.
4. **Permutation mix.** Three different fixed bit permutations (P-boxes) of
   the word are XORed together: `s4[i] = s3[P0[i]] ^ s3[P1[i]] ^ s3[P2[i]]`.
   Each output bit therefore depends on three S-box outputs in different
   nibbles. This spreads a one-bit input change across the word.
5. **Substitution** with the stage-1 assignment.
6. **Compression (C-S).** Stage-5 bit `i` is XORed into output bit
   `i mod OUT_W`.

The P-box wirings are fixed at elaboration. Permutation `k` (0, 1, 2) of a
remapping is a Fisher–Yates shuffle of the identity:

* It is driven by the linear congruential generator
  `x ← x·1664525 + 1013904223 (mod 2^32)`.
* The generator is seeded with `0x9E3779B9·(k+1) + PBOX_C`.
* Step `i` (from the top index down) swaps element `i` with element
  `(x >> 8) mod (i+1)`.

`stbpu_top` gives R1, R2, R3 and R4 the selectors 0, 1, 2 and 3, so each
function has its own wiring. Changing a selector is the intended way to try
other wirings. The prediction side and the training side use identical
instances, so they always agree.

In hardware, the function is pure wiring plus about four XOR/S-box levels
deep. It is combinational (`din` → `dout`): the index is computed in the
same cycle as the request, and the table read completes on the next edge.

**How good is the mixing?** The unit test of `st_remap` measures three
things on R1 at the default width:

* **Avalanche:** flipping one random input bit changes on average about 34%
  of the output bits. An ideal function would change 50%.
* **Uniformity:** random addresses spread over the 512 BTB sets with a
  coefficient of variation of about 0.10, which is close to ideal.
* **Key dependence:** the same address under different keys gives different
  outputs in every tried case.

One weakness should be known. Structured address sets, such as 4096
addresses at a fixed 32-byte stride, are spread less evenly: about 320 of the
512 sets are used, with up to 40 addresses in one set. The reason is that the
stage-2 fold and the modular compression are linear. So the construction is
adequate for branch streams, but it is not a strong pseudo-random function.
The defence against brute force is re-randomization, not the strength of
this function.

## Modes of BTB addressing and the role of R2

The BTB has two lookup modes:

* **Mode 1** is used for direct jumps, calls and conditionals. R1 of the
  branch address gives set index, tag and offset.
* **Mode 2** is used for indirect jumps and calls. It is also used for
  returns when the thread's RSB is empty. R2 of the thread's BHB is XORed
  into the R1 tag.

Because of mode 2, one indirect branch can own several entries: one per
recent branch history. Its target can then be predicted from the path that
led to it.

A hit needs a match on tag **and** offset in the selected set. The offset is
part of the key space, not a byte position. Together, tag and offset give
13 bits of per-entry entropy.

The BHB is shifted and mixed on every direct jump, call and taken
conditional: `bhb ← (bhb << 2) ^ (ip[23:0] ^ ip[47:24])`. Because it is a
58-bit shift register shifted by two places, it forgets a branch after 29
further updates. The GHR shifts in the direction of every conditional
branch.

## Target encryption

The BTB and RSB store only the low 32 bits of a target, as the baseline
does. On writing, the bits are XORed with `phi` of the writing thread. On
prediction, the stored word is XORed with `phi` of the predicting thread.
The result is extended to 48 bits with the upper 16 bits of the *branch*
address: `pred = {ip[47:32], stored ^ phi}`.

A thread that reads its own entry gets its target back exactly. If another
token's entry is reached by a collision, the prediction is
`target_A ^ phi_A ^ phi_V`, which is useless to an attacker who knows
neither half-token. XOR is used because it adds no delay and costs no area
to speak of. Its weakness to known-plaintext attacks does not matter here:
ciphertexts are never visible, and tokens change often.

Return addresses are encrypted when the call resolves and pushed onto the
RSB. A token change therefore also invalidates the return stack.

## Secret tokens, the monitor and re-randomization

`st_token_regs` holds one 64-bit ST per hardware thread:

* `psi` is bits [31:0] and `phi` is bits [63:32].
* Only privileged accesses may read or write an ST. An unprivileged access
  returns zero, changes nothing and raises `msr_fault`.
* The operating system saves and restores the ST as part of a process's
  context. Restoring a token restores that process's trained history
  exactly: nothing has to be flushed, and two threads that run the same
  process with the same token share predictions.

`st_rerand_monitor` keeps, per thread, a threshold and a down-counter for
each of the two events:

* **Mispredictions:** a wrong direction of a conditional branch, or a
  missing or wrong target of a taken branch.
* **BTB evictions:** a valid entry replaced on a fill.

Out of reset, the counters equal the thresholds. Each event decrements the
counter of the thread that caused it. The event that empties a counter
reloads it from its threshold and raises `rerand` for that thread for one
cycle. In that cycle the token register loads `rng_data[t]`, and
`rng_take[t]` tells the random source that the value was used.

The thresholds and counters are also privileged registers, so the OS saves
them with the context. A privileged write wins over an event or a
re-randomization in the same cycle.

Default thresholds: 41 500 mispredictions and 26 500 evictions. They come
from the security analysis at an attack-difficulty factor `r = 0.05`, and
they hold well below the cheapest known attack:

* about 2^21 evictions for BTB reuse attacks;
* 5.3·10^5 evictions for eviction-set attacks;
* about 2^31 mispredictions for target injection.

A smaller `r` gives lower thresholds: more security, more lost history.

Nothing is flushed when a token is replaced. The old entries stay in the
tables and age out through normal replacement. Under the new `psi` they map
elsewhere; under the new `phi` their targets decrypt to garbage.

## Timing and port protocol of `stbpu_top`

**Prediction** (`pr_valid`, `pr_tid`, `pr_ip`, `pr_type`, `pr_two_level`):

* One request per cycle.
* The remappings and the RSB top are evaluated in the request cycle. BTB and
  PHT are read at the clock edge.
* The answer is valid **one cycle later** (`pr_resp_valid`) and carries:
  * `pr_taken`: the PHT counter's MSB for conditionals, 1 for all other
    kinds;
  * `pr_target_valid` and `pr_target`: the decrypted 48-bit target;
  * `pr_src`: where the target came from (BTB mode 1, BTB mode 2, RSB, or
    none).
* Returns take the RSB top if the RSB is not empty, else BTB mode 2.

**Resolve** (`rs_valid`/`rs_ready`): the front end hands back each branch in
program order, with these fields:

* its real direction and target;
* its fall-through address (pushed by calls);
* what was predicted for it.

On an accepted resolve the unit does all of the following:

* updates GHR, BHB and the RSB of that thread;
* writes taken branches into the BTB (mode 2 for indirects and returns,
  mode 1 otherwise);
* trains the PHT counter for conditionals;
* raises `misp_event` if the prediction was wrong.

The BTB and PHT updates are two-cycle read-modify-writes, so `rs_ready` is
low in the cycle after an accepted resolve. An eviction is reported on
`evict_event` for one cycle, right after the write edge of the update.

**MSR port** (`msr_valid`, `msr_write`, `msr_priv`, `msr_tid`, `msr_addr`):

* selects the ST, either threshold or either counter;
* read data is combinational;
* writes take effect at the clock edge.

**Observability outputs:** `misp_event`, `evict_event`, `rerand_event[t]`,
`rsb_overflow` and `rsb_underflow` show each mechanism as it happens.

## Storage and size

At defaults (two threads), synthesis gives:

* about 240 kbit of table storage:
  * BTB: 512 × 8 × (8 tag + 5 offset + 32 target) = 184 320 bits;
  * PHT: 16 384 × 2 = 32 768 bits;
  * RSB: 2 × 16 × 32 bits;
* about 6.4 k flip-flops, mostly the BTB valid bits and replacement
  pointers, the histories, the tokens and the 32-bit counters;
* about 2.8 k logic cells.

The BTB memory holds one word per set (all eight ways). A lookup reads one
set and compares all ways in parallel. Replacement chooses, in order:

1. the hitting way;
2. otherwise the lowest invalid way;
3. otherwise a per-set round-robin victim.

## Where this RTL departs from, or adds to, the publication

Taken from the publication:

* all structure sizes;
* the ST split into `psi`/`phi` and the privileged access rule;
* the R1–R4 input/output widths;
* the six-stage construction of R1 and the two S-box tables;
* the XOR target encryption and the 48-bit extension;
* the two monitored events, the down-counters with reload and the default
  thresholds;
* RSB fall-back to BTB mode 2 on underflow.

Choices made here because the publication does not fix them:

* **Remapping details:**
  * which S-box goes in which slot;
  * only 4→4 S-boxes are used, although the publication mentions 3→3
    S-boxes as well;
  * the P-box wirings, which the publication generates randomly and does
    not list;
  * the compression rule;
  * R2–R4 use R1's structure, since only R1's design is shown.
* **Mode-2 tag:** how R2 enters the mode-2 lookup. Here its output is XORed
  into the R1 tag; index and offset still come from R1.
* **BHB update:** the exact update formula, and the 16 (not 18) GHR bits
  fed to R4. The 16 follows the remapping input table.
* **Training:** in order, at resolve time, without speculative history
  update or repair.
* **PHT mode:** chosen per branch by the front end (`pr_two_level`); the
  baseline's selection rule is not public.
* **Misprediction test:** on resolve, comparing against the prediction that
  the front end hands back.
* **Register formats and timing:** MSR selector encoding, 32-bit counters,
  a threshold of 0 treated as 1, reset values, port timing and the
  one-cycle busy period after a resolve.
* **Replacement policy:** the BTB replacement policy.

Not included:

* the pseudo-random number generator. It is an existing on-chip source,
  so `rng_data`/`rng_take` are ports.
* the variants of STBPU for TAGE-SC-L and Perceptron predictors, with their
  remappings R_t and R_p. These are alternative predictor back-ends, and the
  publication does not give their construction.
* the operating-system side: token assignment policy and context save and
  restore.

## Simulating

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). It
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if
it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl --top-module tb_stbpu_top \
    rtl/stbpu_pkg.sv tb/tb_stbpu_top.sv
./obj_dir/Vtb_stbpu_top
```

`-Irtl` lets Verilator find each module in `rtl/<module>.sv`; only the
package has to be named, and it must come first.

For another block, replace the testbench file and the top-module name
(`tb_st_btb`, `tb_st_remap`, ...).
`tb_stbpu_top` runs the complete unit at its default sizes (two threads,
full BTB/PHT/RSB, reset thresholds) in well under a second. It lowers the
thresholds through the MSR port, as an OS would, to reach the
re-randomization events quickly.

The end-to-end test exercises each mechanism and counts it; a mechanism
that never happened counts as a failure. It covers:

* mode-1 and mode-2 BTB predictions;
* 1-level and 2-level PHT learning;
* RSB returns, overflow and underflow with fall-back;
* BTB evictions;
* isolation of two threads with different tokens, and sharing with equal
  tokens;
* a context switch that restores a token and its history;
* faulting unprivileged MSR accesses;
* re-randomization by each of the two counters, after which the old trained
  targets no longer predict.

It also checks the one-cycle prediction latency.

`tb_stbpu_workload` runs a small synthetic program on both threads at the
default sizes. Both threads run the same binary at the same addresses, but
as different processes with different tokens. The program has 24 functions
with calls and returns, periodic conditionals, direct jumps and
history-dependent indirect jumps. It runs in three phases:

| phase | setup | result |
|---|---|---|
| 1 | reset thresholds | about 96% of branches fully predicted after warm-up |
| 2 | thresholds divided by 100 | each thread re-randomized 4 times; about 81% predicted, retraining included |
| 3 | both threads share one token | entries are shared between the threads |

Other checks in this testbench:

* In phases 1 and 2, neither thread ever receives the other thread's
  target, even though every branch address collides in the baseline.
* The number of re-randomizations matches a model of the down-counters.

Phase 1 also sees BTB evictions (about 11 per iteration per thread),
although the two threads together use fewer than 400 of the 4096 entries.
The program's regularly spaced addresses crowd some sets, as described
under the remapping's uniformity. This is the likely source of most of the
remaining 4% of mispredictions.

The unit tests compare each block against a model computed in the
testbench:

* **`st_remap`:** against an independent model of the six stages, plus the
  avalanche, uniformity and key-dependence statistics above.
* **`st_btb`:** hits, misses, replacement order, eviction pulses and update
  latency.
* **`st_pht`:** counter saturation in both directions.
* **`st_rsb`:** wrap-around, overflow and underflow.
* **`st_history`:** GHR/BHB update rules per branch type.
* **`st_target_crypt`:** round trip and cross-token garbling.
* **`st_token_regs`:** privilege, write-over-rerand priority, random reload.
* **`st_rerand_monitor`:** countdown, reload, per-thread separation, MSR
  access.

To change a size, override the parameters of `stbpu_top`:

* `BTB_SETS`, `BTB_WAYS`, `BTB_TAG_W`, `BTB_OFF_W`;
* `PHT_ENTRIES`;
* `RSB_DEPTH`;
* `MISP_THRESHOLD`, `EVICT_THRESHOLD`;
* `THREADS`.

The remapping widths follow from them. `st_remap` requires the output to be
at most half the padded input width.
