# LO-FAT control-flow attestation unit in SystemVerilog

A remote verifier often wants more than a check of *what code* a small
embedded device holds. It wants to know *how that code ran*. Run-time
attacks such as return-oriented programming, corrupted loop counters, or
data that steers a branch leave the code image untouched. They only change
the path taken through it. Control-flow attestation measures that path. The
device records every control transfer it executes and reports a compact,
signed summary, and the verifier compares it with the paths the program's
control-flow graph allows.

This RTL is a hardware attestation unit that sits beside a RISC-V core. It
watches the instructions the core retires and never stalls it. It produces
two results:

* **A**: a SHA3-512 digest over the (source, destination) address pairs of
  the control transfers that were executed;
* **L**: loop metadata. For every loop that ran, the metadata gives its
  entry address, an identifier for each distinct path taken through its
  body, how often each path ran, and the indirect-branch targets seen in it.

The key idea is loop compression. Hashing every iteration of a loop would
cost hash-engine time and would make the digest depend on iteration counts
the verifier cannot predict. Instead, each distinct path through a loop body
is hashed only the first time it occurs. Later runs of the same path only
increment a counter. The verifier rebuilds the digest from the metadata.
A signature over A, L and the verifier's nonce completes the protocol; the
signing unit and the core are outside this RTL.

## Block structure

```
 core retire port (pc, instr, valid)
        |
   branch_filter --(branch_status, loops_status)--> loop_monitor ----> loop_counter_mem x3
        |  \                                            |   ^  \            ^
        |   `--(src,dest)--> branches_memory <--addr----'   |   `--loop_end--> metadata_generator --> metadata_storage --> L
        |                          |                        |                      (owns a level's counters while reading them out)
        `--non_loops--> hash_controller <--new_path---------'
                           |  (cache buffer)
                        sha3_512 --> A
```

| module | role |
|---|---|
| `branch_filter` | picks out conditional branches, `jal` and `jalr`; resolves each branch from the next pc; detects loops and their nesting |
| `loop_monitor` | builds the path identifier of the running iteration at each level; looks it up in the counter memory; decides what is hashed |
| `indirect_target_cam` | per level: gives each distinct indirect-branch target in a loop a 4-bit code |
| `branches_memory` | per level: two banks of 16 pairs holding the pairs of the current iteration until it is known whether the path is new |
| `loop_counter_mem` | per level: 2^16 × 8-bit iteration counters addressed by path identifier |
| `hash_controller` | cache buffer in front of the hash engine; orders direct pairs and stored paths into one message; ends the message |
| `sha3_512` + `keccak_round` | SHA3-512, one 64-bit word per cycle, 3-cycle permutation |
| `metadata_generator` | at a loop exit, writes the loop's metadata words and clears its counters |
| `metadata_storage` | 1024 × 64-bit buffer holding L |
| `lofat_top` | connects everything; `lofat_pkg` holds the shared types and sizes |

## Following the core: events and loops

The core presents one retired instruction per cycle at most (`instr_valid`,
`pc`, `instr`). Only 32-bit RV32 encodings are decoded. When a control-transfer
instruction retires, the filter holds it until the next instruction arrives.
The next pc is the destination, and for a conditional branch it also tells
whether the branch was taken (`pc != src + 4`). The resolved branch leaves the
filter as one *event*, registered one cycle later. With back-to-back
instructions the event therefore appears two cycles after the branch.

Loops are found with a link-register heuristic:

* A taken backward transfer that does not write the link register and is
  not a return opens a loop.
  * A transfer writes the link register when it is a `jal`/`jalr` with rd = x1 or x5.
  * A return is `jalr x0, 0(x1 or x5)`.
  * Backward calls and returns are not loops.
* The branch's destination is the loop's *entry node*.
* The instruction after the branch is its *exit node*.
* A later transfer back to the entry of the innermost loop ends one
  iteration (*path end*).
* A loop is left when a destination lies outside `[entry, exit)`. This covers
  falling through the exit, a `break`, or jumping before the entry.
  * Calls made inside a loop are counted per level.
  * While one is outstanding the range test is off. So a subroutine placed
    elsewhere in memory stays part of the loop body.
* Up to three loops can be nested. A back edge found at depth 3 is an
  ordinary branch of the innermost loop.

One consequence of detection at the back edge: a loop's first iteration is
seen before the loop is known, so its pairs are hashed like code outside
loops.

## Path identifiers

While an iteration runs, the loop monitor appends bits to that level's
identifier:

| transfer | bits appended |
|---|---|
| conditional branch | 1 taken / 0 not taken |
| `jal` | 1 |
| `jalr` (indirect call, return, computed jump) | the 4-bit code of its target |

The branch that closes the iteration (back to the entry) is always taken,
so it is left implicit. A leading 1 is prepended, so paths of different
lengths never share an identifier.

**Worked example.** The example is a `while` loop with an `if/else`:

- N2 is the loop test at the entry.
- N3 is the `if`.
- N4 is the `then` part, ending in a jump.
- N5 is the `else` part.
- N6 closes the loop.

The then-path runs N2 not taken, N3 not taken, N4 jump, N6 back. Its bits are
`0 0 1` plus the implicit 1, which is the textbook encoding "0011". Its identifier is
`0b1001` = 9. The else-path runs N2 not taken, N3 taken, N6 back. Its bits
are "011" and its identifier is `0b101` = 5.

With 16-bit identifiers:

- a path holds 15 explicit bits, i.e. 16 branches including the closing one;
- each indirect branch costs 4 bits instead of 1;
- a longer path is an **overflow path**:
  - its pairs stored so far are hashed at the moment it overflows;
  - its remaining pairs are hashed as they occur;
  - it is counted under identifier 0.

## Counting iterations and deciding what is hashed

This is the part of the design with the most timing subtlety.

**Path buffers.** Each level has two banks of 16 pairs in `branches_memory`.
The running iteration's pairs go to the current bank. The decision is made
at the path end, when the identifier is complete:

* The identifier addresses the level's counter memory.
  * The read is issued in the event cycle.
  * The decision and the write-back happen in the next cycle (stage M2).
  * A write to the same address in the previous cycle is forwarded.
* **Count 0: new path.**
  * The bank is sealed and handed to the hash controller (`new_path`).
  * The count becomes 1.
  * The identifier is appended to the loop's list of paths, in order of first
    occurrence, at most 16 per loop.
* **Count > 0: repeated path.**
  * The bank is released at once.
  * The count is incremented and saturates at 255.
* The next iteration continues in the other bank.
  * The hash controller releases a sealed bank when its last pair has been
    accepted by the hash engine.
  * If no bank is free, the next iteration is handled as an overflow path.

**What goes in `new_path`.** All hash work caused by one event is described
by one `new_path` word, issued exactly one cycle after the event. It lists:

- banks to hash, per level;
- the number of pairs in each bank;
- whether the event's own pair is hashed directly.

The hash controller delays the filter's `non_loops` flag by one cycle, so
both refer to the same event.

**Loop exit.** When a loop is left:

- the pairs of its incomplete last iteration are hashed;
- a snapshot goes to the metadata generator: entry, path list and target
  table;
- the level's state is reset.

The generator then *owns* the level's counter memory while it reads and
clears the listed counts.

**Untracked loops.** A new loop at the same level may complete its first
iteration while the generator still owns that memory. Counting it would read
stale counts, so that loop becomes *untracked*:

- its stored pairs and all later pairs are hashed directly;
- its metadata header carries the untracked flag and no paths.

With up to 48 cycles of read-out per loop, this happens only for short loops
that follow each other closely at the same level.

The resulting hash message is the order in which hashing was decided. For one
event this is:

1. stored paths, highest level first (exiting loops' incomplete iterations,
   completed new paths, overflowing paths);
2. then the event's own pair, if it is outside all loops or hashed directly.

## Indirect branches

A 32-bit target cannot be put in a 16-bit identifier. Instead each level has a
15-entry table (`indirect_target_cam`, two interleaved CAMs of 8 and 7
entries) that gives targets codes 1..15 in order
of first occurrence inside the current loop. A target beyond the 15th gets
code 0, so the verifier can see that the limit was hit. The lookup is a
parallel compare in the event cycle; a new target is stored at the clock
edge. The table's contents go into the loop's metadata, and the table is
cleared at loop exit. Only `jalr` instructions that are encoded into a path
take a code. Those hashed directly (overflow, untracked) do not.

## The hash stream

Each hash input word is `{dest, src}` (64 bits). In byte order this is the
little-endian source address followed by the destination. The message is
padded as FIPS 202 SHA3-512 (0x06 … 0x80), and `hash[511:504]` is the
digest's first byte.

The engine's absorb buffer holds 9 words (576-bit rate). After 9 words it
runs the 24 Keccak rounds in 3 cycles (8 unrolled rounds per cycle) and is
blocked meanwhile. So it accepts at most 9 words in every 12 cycles.

The core can retire a branch every cycle, and a new loop path adds up to 16
stored pairs at once. The 16-entry **cache buffer** in `hash_controller`
absorbs both. Each entry is one event's job (stored banks plus an optional
direct pair), not a single word. A job that finds the buffer full is dropped:

- its banks are released;
- the sticky `lost` output is set.

A measurement with `lost` set is incomplete.

## Loop metadata

The metadata generator queues up to 4 loop exits, innermost first when
several levels exit together. It writes these 64-bit words per loop to
`metadata_storage`:

| word | bits |
|---|---|
| loop header | `[63:60]=1`, `[57:56]` level, `[55]` untracked, `[52:48]` number of paths, `[44:40]` number of targets, `[31:0]` entry address |
| path | `[63:60]=2`, `[47:32]` path identifier, `[7:0]` iteration count |
| target | `[63:60]=3`, `[35:32]` code, `[31:0]` target address |

A path word takes two cycles: read the count, then write the word and clear
the count. The header and each target take one cycle each. A job takes
3 + 2·paths + targets cycles in all. A path's count covers only its repeats
after it was first hashed plus the first run, i.e. the total number of runs
of that path while the loop was tracked.

## Using the unit

1. Pulse `start`. This clears the run state of every block. The counter
   memories start at zero and are kept clean by the generator.
2. Present retired instructions.
3. Pulse `stop`:
   - open loops are closed, and their metadata is written;
   - the hash controller drains its buffer and ends the message;
   - `done` rises when the digest is valid and all metadata is stored.
4. Read L word by word: `meta_raddr` in, `meta_rdata` one cycle later, and
   `meta_count` words in all.

The `st_*` pulses, `cbuf_fill`, `meta_we`, `lost_src` and the `hash_in_*`
stream are observation outputs for status counters and tests.

Default sizes (`lofat_pkg` and top parameters):

| parameter | value | meaning |
|---|---|---|
| `MAX_DEPTH` | 3 | nested loops tracked |
| `ID_W` | 16 | path identifier width |
| `CNT_W` | 8 | iteration counter width |
| `N_CODE` | 4 | indirect-target code width (15 targets + code 0) |
| `MAX_BR` / `NBANK` | 16 / 2 | pairs per path buffer / buffers per level |
| `MAX_PATHS` | 16 | distinct paths listed per loop |
| `CBUF` | 16 | cache-buffer jobs |
| `MD_WORDS` | 1024 | metadata words |

The counter memories are 3 × 2^16 × 8 bit = 1.5 Mbit, which is the dominant
cost. Generic synthesis of the top gives:

- about 3,400 cells;
- about 12,200 flip-flop bits, most of them in the loop snapshots, the
  metadata queue and the cache buffer;
- 1.66 Mbit of memory arrays: the counter memories, metadata storage and
  Keccak constant tables.

## Departures and limits

* **Detection latency.** The original description quotes 2 cycles for
  branch handling and 5 cycles at loop exit. This implementation has:
  - 2 cycles to the event;
  - 3 cycles to the counter decision (event + 1);
  - a loop exit that is decided in the event cycle, with `loop_end`
    issued one cycle later (3 cycles after the branch; checked in test).

  The hash and metadata content do not depend on these latencies.
* **Target table.** Each level's target table is two interleaved CAMs
  searched in parallel: odd codes live in one, even codes in the other. The
  split by code parity is this design's own choice. The table holds
  2^4 − 1 = 15 targets. A figure of "16 targets" for n = 4 cannot be met
  together with a reserved all-zero code.
* **Fall-backs.** The following are this design's own choices:
  - the overflow path (identifier 0);
  - hashing the incomplete last iteration;
  - untracked loops;
  - the "no free bank" path;
  - dropping on full buffers.

  A verifier must model them to rebuild the digest.
* **First iteration and early branches.** A loop's first iteration is hashed
  as non-loop code, because the loop is only recognised at its first back
  edge. A branch still waiting for its successor at `stop` is not reported.
* **Not included.** The following are left out:
  - the RISC-V core;
  - the signing of (A, L, nonce);
  - compressed instructions;
  - any memory-mapped interface.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* `tb_lofat_top` runs the whole unit at its default parameters. A small
  RV32 instruction-set model plays the core. An untimed reference model
  (`tb_rv_pkg`) computes the expected hash words and metadata from the same
  control-flow events. Its scenarios are:
  - the two-path example loop: identifiers 9 and 5 with counts 3 and 2, and
    a digest checked against an independent SHA3-512;
  - three nested loops with direct and indirect calls, 20 call targets, and a
    16-branch subroutine;
  - stopping inside an open loop;
  - a loop whose indirect call reaches 20 targets;
  - back-to-back instructions.

  It counts each mechanism and fails if one never occurs:
  - loop entry and exit;
  - new, repeated and overflow paths;
  - direct hashing;
  - depth 3;
  - engine blocked;
  - cache-buffer use;
  - target codes and code 0;
  - untracked loops;
  - no free bank;
  - metadata writes.
* Unit testbenches:
  - `tb_branch_filter` checks the event content and the 2-cycle latency.
  - `tb_loop_monitor` uses the real filter and memories. It checks the
    example's identifiers, banks and counts, and that `new_path` comes one
    cycle after the event. It also checks overflow and untracked loops.
  - `tb_hash_controller` checks the word order, bank releases, the 9-of-12
    engine pattern, finish and overflow.
  - `tb_metadata_generator` checks the words, clearing, ownership and job
    timing.
  - `tb_sha3_512` checks known digests for 0 to 20 words and the 3-cycle
    block.
  - The small memories and the target table have their own tests.

Simulating with plain Verilator:

```
verilator --binary --timing -y rtl -y tb +libext+.sv -Irtl \
    rtl/lofat_pkg.sv tb/tb_rv_pkg.sv tb/tb_lofat_top.sv --top-module tb_lofat_top
./obj_dir/Vtb_lofat_top +verilator+rand+reset+2
```

Unit testbenches build the same way with their own top module (add
`tb/tb_rv_pkg.sv` for `tb_branch_filter` and `tb_loop_monitor`). All state
that is read is reset or initialised, so the tests pass with random initial
values.
