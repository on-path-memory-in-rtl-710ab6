# Folded path memory and merged partial-sum memory for list SC polar decoders

A list successive-cancellation (LSC) decoder for a polar code of length N runs L
successive-cancellation decoders side by side. It has to keep two things for each of
its L paths:

* the **partial sums**: the bits decoded so far, re-encoded. The G functions of the
  decoding tree need them.
* the **partial decoded vector**: the decoded bits themselves. The CRC check and the
  final output need them.

After every decoded bit, list management (LM) keeps the best L of the 2L extended paths.
A surviving path may be a copy of another path. The usual path memory keeps L x N
register bits and copies whole N-bit vectors through an N-bit L x L crossbar. For large
N and L that crossbar costs a lot of area.

This RTL implements two ways around the problem:

1. **Folded path memory.** The decoded bits are handled like the partial sums in a
   folded partial-sum network (PSN):
   * the bits of the current P-bit block stay in small registers and go through a
     P-bit crossbar;
   * finished words go to per-path SRAMs;
   * per-path pointers say which SRAM holds which group of words, so paths are copied by
     copying pointers, not data.
2. **Merged memory (the default).** No path memory at all. The SRAMs of the folded PSN
   are made N bits deep so they keep every partial sum. Once a group of partial sums
   is no longer needed, it is decoded back into bits in place, in cycles when the SRAMs
   are idle anyway. For any practical parallelism P this costs no extra cycles.

Both sit behind one top module, `lscd_path_unit`. Its default size is N = 1024, L = 16,
P = 64.

## Notation

* `F = [1 0; 1 1]`. A block of Λ = 2^λ decoded bits u is encoded as `u · F^(⊗λ)`.
  Output bit w of that encoding is the XOR of all input bits v whose index contains the
  bits of w (`v & w == w`).
* `F^(⊗λ)` is its own inverse. So encoding twice gives the input back. The recovery
  relies on this.
* P = 2^p is the number of bits handled per cycle (the semi-parallel parallelism).
  n = log2 N.
* A frame is cut into N/P **words** of P bits. Word w holds bits wP … wP+P−1, and bit j
  of the word is bit wP+j.

## Words, groups and pointers

This is the part that holds the design together. Every memory here uses the same
layout.

**Word layout.** Word w always lives at address w of an SRAM. Nothing is ever moved to a
different address.

**Groups.** Let c be the number of completed words. The completed prefix splits into
aligned power-of-two blocks, one per set bit of c:

* the block for bit k of c has 2^k words and is called the **level-k group**;
* every such block is a left child in the decoding tree. So it is exactly a block whose
  partial sums some G node needs.

**How c changes.** When one more word completes:

* **c becomes odd:** the new word is a level-0 group. Its P bits are written to the
  path's own SRAM in one cycle (the *store*).
* **c becomes even, lowest set bit 2^k:** the trailing groups and the new word merge
  into one level-k group. This happens exactly when the decoder starts the G node at
  stage p+k, which needs the partial sums of that block. The merged group is produced
  serially, one word per cycle (the *generation*).
* **c = N/P (frame done):** nothing merges. The last word becomes an extra group. So a
  finished frame has groups of N/2, N/4, …, 2P, P and P bits, that is n−p+1 groups.

**Pointers.** Each path has n−p+1 pointers (`pointer_mem`). Pointer k names the SRAM
that holds the path's level-k group.

* When LM makes path l a child of path a, path l takes all of a's pointers. No data
  moves.
* When a group is written, each path writes it into its **own** SRAM. That path's
  level-k pointer then points at itself.
* During a generation, each path reads the older words of the block through the shared
  P-bit crossbar, from the SRAM its pointers name. Every path handles the same word
  address in the same cycle. Words are processed from the top down, and a word is read
  as an operand before any path overwrites it. So one path's writes can never corrupt a
  word that another path still has to read.

## Serial generation of the partial sums

Take a block of 2^k words, indexed from its start. Before the merge it holds:

* S_w for the older sub-groups;
* the new top word, which comes from the register bank.

The merged encoding X is built from the top down:

```
X_top = bank                           (stage-p partial sums of the newest word)
X_w   = S_w  XOR  X_(w + 2^b)          b = highest zero bit of w inside the block
```

In hardware, each cycle takes:

* one P-bit XOR per path;
* "Input 0" = S_w, read through the crossbar from the SRAM the pointer names;
* "Input 1" = X_(w+2^b), an earlier result, read from the path's own SRAM. This is why
  the merged memory's SRAM has two P-bit read ports.

Each result is written back in place and streamed out on `ps_word`. For Λ = 8 bits and
P = 2 the sequence is:

| cycle | Input 0 (S) | Input 1 (X) | output |
|---|---|---|---|
| 0 | s¹₆ s¹₇ (bank) | – | s³₆ s³₇ |
| 1 | s¹₄ s¹₅ | s³₆ s³₇ | s³₄ s³₅ |
| 2 | s²₂ s²₃ | s³₆ s³₇ | s³₂ s³₃ |
| 3 | s²₀ s²₁ | s³₄ s³₅ | s³₀ s³₁ |

**Stages up to p.** The partial sums for stages ≤ p stay in one P-bit register bank per
path (`psn_merge`). When bit t of the current word arrives:

* the bank of the parent path is routed through the crossbar;
* the new bit is merged in place with the same top-down rule, applied to bits.

After P bits the bank holds `u_P · F^(⊗p)`. That is the word that is stored or used as
the top word of a generation.

## Getting the decoded bits back (merged memory)

Split a finished group of Λ bits into P-bit words. Each word j holds stage-λ partial
sums, and these are word-level XORs of the vectors `(u_P)_j · F^(⊗p)`. Encoding the
group once more, word by word, with `F^(⊗(λ−p))` gives back the words
`Y_j = (u_P)_j · F^(⊗p)`. For 4 words:

```
Y0 = S0^S1^S2^S3   Y1 = S1^S3   Y2 = S2^S3   Y3 = S3
```

`recovery_sched` walks the butterflies of that word-level encoder:

* one pair (a0, a1) per cycle: word a0 ^= word a1;
* largest distance first. For 4 words the order is (0,2) (1,3) (0,1) (2,3);
* a group of 2^K words takes K·2^(K−1) cycles, that is (Λ/2P)·log2(Λ/P).

It uses the same SRAM ports and XORs as the generation. It runs in every SRAM copy at
once, including copies no path points to any more.

**When a group can be recovered.** The group of level k that starts at word
N/P − 2^(k+1) is final as soon as it has been generated. The scheduler queues it then.
It works only in cycles when the SRAMs are free: not storing, generating or reading
out. Such cycles arise while the decoder computes the nodes below stage p.

**When recovery is hidden.** A P-bit block spends 2P−2 cycles below stage p. Recovery
adds no latency as long as

```
Λ < P · 2^(2P−2)
```

for every group. With P = 64 this holds for any realistic N.

**Readout.** Once the frame is done and the queue is empty, `rd_ready` rises. The
readout then:

* sends every word of every path through the crossbar (selected by the path's
  pointers);
* passes it through one `pbit_encoder` per path, which turns Y_j back into the P
  decoded bits.

## Folded path memory (the alternative scheme)

`folded_path_memory` keeps the decoded bits themselves. It follows the same count,
store and generation cycles as the folded PSN:

* **Left part:** one P-bit register bank per path. After LM, the crossbar gives each
  path its parent's bank, and a shifter pushes in the new bit.
* **Right part:** one N-bit SRAM per path, with a single P-bit read port.
  * When a word completes on an odd count, it is stored.
  * When it completes on an even count, the block's words are consolidated into the
    path's own SRAM during the generation cycles: the top word from the bank, the
    others copied through the crossbar from the SRAMs the pointers name.
* **Readout:** like the merged memory, but without encoders.

With `SCHEME = SCHEME_FOLDED_PM` the top pairs this block with a `merged_memory` whose
recovery is switched off (`RECOVER = 0`), which then serves only as the folded PSN.

## Top-level interface and timing (`lscd_path_unit`)

| port | dir | meaning |
|---|---|---|
| `start` | in | begin a frame (clears counters, pointers and the recovery queue) |
| `lm_valid`, `lm_parent[L]`, `lm_bit[L]` | in | one decoded bit: parent index and new bit of each surviving path; accepted when `lm_ready` |
| `ps_bank[L]` | out | register-bank partial sums for G nodes at stages ≤ p |
| `ps_valid`, `ps_addr`, `ps_word[L]` | out | serially generated partial sums for a G node at stage p+k |
| `rd_ready`, `rd_start` | out/in | frame done (and recovery finished); start readout |
| `rd_valid`, `rd_addr`, `rd_bits[L]` | out | one word of every path per cycle, words 0 … N/P−1 |
| `recov_busy` | out | recovery pending or running |

Timing:

* **After each accepted `lm_valid`:**
  * a word completing on an odd count (or the frame's last word) costs 1 store cycle;
  * a word completing on an even count with lowest set bit 2^k starts 2^k generation
    cycles in the next cycle, top word first. These are the cycles of the G node at
    stage p+k.
  * `lm_ready` is low during the store or generation.
* **Readout:** takes N/P cycles and starts the cycle after `rd_start`.
* **Clocking and reset:** one clock; `rst_n` is an asynchronous active-low reset.

## Modules

| file | role |
|---|---|
| `polar_pkg.sv` | scheme enum; helpers for bit positions and the group level of a word |
| `pbit_encoder.sv` | P-bit `F^(⊗p)` butterfly encoder (readout of the merged memory) |
| `psn_merge.sv` | in-place bit merge of a P-bit register bank (parallel PSN, stages ≤ p) |
| `list_crossbar.sv` | L x L crossbar of W-bit words, output o = input sel[o] |
| `psum_sram.sv` | per-path SRAM, 1 write and 1 or 2 read ports, written as an array |
| `pointer_mem.sv` | n−p+1 pointers per path: init, copy from parent, set to own, lookup |
| `recovery_sched.sv` | queue of final groups and the butterfly pair schedule for recovery |
| `merged_memory.sv` | list folded PSN with N-bit SRAMs, recovery and readout |
| `folded_path_memory.sv` | register banks and shifters, SRAMs, pointers, consolidation, readout |
| `lscd_path_unit.sv` | top, scheme selection |

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each prints
`TB_RESULT checks=… failures=…` and has a watchdog.

`tb/lscd_checker.sv` acts as the rest of the decoder:

* before each bit it waits the cycles the decoder would spend below stage p: p cycles
  before the first bit of a word, otherwise one more than the trailing zeros of the bit
  position;
* it then applies random LM results, with random parents among the live paths and
  random bits;
* a bit-level model of all paths checks:
  * every register bank after every bit;
  * every generated word, its address and its cycle;
  * the readout of all paths.

Coverage by testbench:

* **`tb_lscd_path_unit`** runs three units. Each mechanism must occur at least once:
  stores, generations, the N/2 generation, path duplication, and recovery during
  decoding.
  * merged memory, N=64, L=4, P=4: recovery must be fully hidden;
  * folded path memory, same size;
  * merged memory, N=256, P=2, which breaks the bound above: recovery must cost extra
    cycles (71 were measured).
* **`tb_lscd_full`** runs one whole frame at the default N=1024, L=16, P=64 (about
  575 000 checks, under a second). It checks that recovery adds no cycle.
* **`tb_recovery_sched`** checks the recovered words against the word-level encoding,
  the cycle count K·2^(K−1), and the pair order (0,2) (1,3) (0,1) (2,3).

Example with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/polar_pkg.sv tb/tb_lscd_full.sv \
          --top-module tb_lscd_full -o sim && obj_dir/sim
```

Use the same command for any other testbench, with its own name. The package must
come first on the command line. To try another size, change the parameters of
`lscd_path_unit` (N, L, P must be powers of two, with N ≥ 4P and L ≥ 2).

## Where this RTL goes beyond or departs from the published description

* **Parallel PSN.** Its inner structure (drawn as a "PSN for length 2P codes" followed
  by a permutation π) is not described. Here it is the in-place bit merge above, and no
  permutation is needed.
* **SRAM layout.** Word w is stored at address w and overwritten in place. The groups
  and pointer levels follow from that choice. In the folded-path-memory scheme the
  folded PSN therefore also uses N-bit rather than N/2-bit SRAMs.
* **Pointers for the partial sums.** Here they live in `pointer_mem` and are copied on
  LM. In a full decoder the LLR memory's pointers could be reused instead.
* **SRAM timing.** Reads are asynchronous and writes synchronous. A real SRAM macro with
  registered reads would need the generation and recovery pipelines to be one stage
  deeper.
* **Idle-cycle accounting.** Recovery may use every cycle in which the SRAMs are free,
  including the LM cycle itself. So the measured budget is a bit larger than the
  2P−2 cycles per word counted above. One cycle is spent picking up each queued group.
* **Not included:**
  * the F/G processing elements, the LLR memories and the decoder's schedule
    controller;
  * list management (sorting by path metric) and the CRC check.

  The unit takes the LM result as an input and hands partial sums and decoded bits
  out.
