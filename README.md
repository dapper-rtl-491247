# DAPPER-H: a RowHammer tracker that resists performance attacks

RowHammer trackers in the memory controller count how often each DRAM row is
activated and refresh the neighbours of a row before it reaches the RowHammer
threshold N_RH. A counter per row is too large, so cheap trackers share
counters between rows or keep them in DRAM or the last-level cache. An
attacker can turn that sharing against everyone else. If the attacker knows
which rows share a counter, a few activations push a counter to the limit, and
every row behind it gets refreshed for nothing. If the counters are cached, a
crafted pattern forces counter misses and DRAM traffic. These are performance
attacks: they do not flip bits, they take bandwidth from other programs.

DAPPER-H keeps the cheap shared counters but makes the sharing unpredictable
and harder to exploit:

* **Secret, changing grouping.** Each row address is encrypted with a keyed
  block cipher. The encrypted address, divided by the group size (256), picks
  the row group counter (RGC). The keys change every refresh window (32 ms),
  so an attacker cannot learn or keep a mapping.
* **Two independent groupings.** Two tables with different keys count every
  activation. A row is suspect only when *both* of its counters have reached
  the mitigation threshold N_M = N_RH / 2. Two rows share both counters only
  by rare chance. So the refresh after a trigger covers only the few rows
  that are in both groups, usually just one row, not all 256.
* **A per-bank filter.** A streaming pattern touches every row once, spread
  over all banks, and would otherwise lift every counter together. In Table 1,
  each group has one bit per bank, and the first activation from a bank only
  sets its bit. Table 1 counts only repeated activations from the same bank.

This repository holds synthesizable SystemVerilog for that tracker, for one
DDR5 channel with two ranks. It also holds self-checking testbenches and a
reference model. The design follows the DAPPER paper (HPCA 2025). Where the
paper gives only the function of a part, the RTL fills in the details; each
such choice is listed in the section on departures below.

## Sizes

| quantity | default | note |
|---|---|---|
| rows hashed together (one rank) | 2M = 2^21 | 32 banks x 64K rows |
| row group | 256 rows | 8K groups per table |
| counter | 8 bits, saturating | N_M = 250 for N_RH = 500 |
| tables per rank | 2 RGC tables + 1 bit-vector table | 8KB + 8KB + 32KB |
| ranks per channel | 2 | 96KB of table storage per 32GB channel |
| cipher | 4 rounds, one 16-bit key per round | per table |
| clock | 0.25 ns (4 GHz) | refresh window 32 ms = 128M cycles |

A rank-level row address is `{bank[4:0], row[15:0]}`. The bank is the top 5
bits, and it is what the bit-vector is indexed by.

## How an activation is counted

Every accepted activation takes one clock cycle (state `S_IDLE`):

1. `llbc_cipher` engines ENC1 and ENC2 hash the row address with the Table 1
   and Table 2 keys. The top 13 bits of each result are the group indices `g1`
   and `g2`.
2. The bit-vector of group `g1` is looked up at the row's bank.
   * If the bit is clear, it is set. Table 1 is not touched. The
     `ev_filtered` strobe marks this case.
   * If it is set, `T1[g1]` is incremented. The vector is cut back to this
     bank's bit alone, so the next activation from any other bank is filtered
     again.
3. `T2[g2]` is incremented in every case.
4. If after the update `T1[g1] >= N_M` and `T2[g2] >= N_M`, a mitigation
   starts (`ev_trigger`).

With 256-row groups, a uniformly spread stream gives each group about eight
rows per bank. The filter therefore lets through only a small part of a
streaming pattern's activations.

## Mitigation and the reset counters

This is the least obvious part of the design. After a trigger, the tracker
must do three things:

* refresh every row that really could be the aggressor;
* lower the two triggered counters, so that the next activation does not
  trigger again;
* never leave any row with an estimate below its true count.

A row's estimate is the smaller of its two counters.

The mitigation walks the 256 members of both triggered groups in parallel.
This takes one member of each group per cycle, using four cipher engines
(state `S_SCAN`):

* **Side 1.** Member `i` of Table 1 group `g1` is the hashed address
  `{g1, i}`. DEC1 turns it back into a real row, and ENC2 finds that row's
  Table 2 group.
  * If that group is `g2`, the row is in both triggered groups. It is a shared
    row, and it is sent out on `mit_*` for a victim-row refresh.
  * Otherwise, the row's Table 2 counter is folded into `reset1`, the running
    maximum for Table 1.
* **Side 2.** Member `i` of `g2` goes through DEC2 and ENC1 in the same way.
  Its Table 1 counter is folded into `reset2`, unless the row lies in `g1`.
  Such a row is shared and has already been sent by side 1.

In the single cycle of `S_RESET`, `T1[g1] := reset1` and `T2[g2] := reset2`
are written, and the bit-vector of `g1` is cleared.

Why this is safe: take a member of `g1` that was not refreshed. Its Table 2
counter is at most `reset1`. After the write-back, its estimate
`min(T1[g1], T2[its group])` is its own Table 2 counter. That value was
already an upper bound on its activations. The same argument holds for
members of `g2`. The shared rows were refreshed, so their counts may restart.

Worked example, following the figure the paper uses. `T1[g1]` and `T2[g2]`
both reach 250. Row A is in both groups and is refreshed. Some other member of
`g1` has a Table 2 counter of 31, the largest on that side, so `T1[g1]` drops
to 31. A member X of `g2` has a Table 1 counter of 100, so `T2[g2]` drops to
100. The reset counter may therefore be well above zero. It can even be at or
above N_M, in which case the next activation of the group triggers again. That
is why the trigger test is `>=` and not `==`.

Two timing facts follow. First, a mitigation holds the rank for
2^GROUP_BITS scan cycles (256), plus one cycle for every cycle a refresh
request waits for `mit_ready`, plus one reset cycle. Second, activations are
held off (`act_ready = 0`) during that time.

## Behaviour under the two mapping-agnostic attacks

`tb/tb_dapper_h_attacks.sv` runs both attacks against one full-size rank.

**Streaming attack.** Every row of the rank is activated in bank-interleaved
order, six times within one window. That is 12.6M activations, the most a
channel can issue per window, all aimed at one rank.

* Table 2 has no filter. Every group receives 256 activations per pass, so its
  counters pass N_M in the first pass and saturate at 255.
* Table 1 alone keeps the tracker quiet. Passes one to five cause no
  mitigation; the check covers the first three, which are one rank's share of
  a channel's window.
* Table 1 is not held to the few dozen counts one might expect. The banks
  reach a group in random order, so a bank whose bit is still set comes up
  after about seven activations (a birthday effect over 32 banks). Table 1
  therefore still counts about one activation in seven, roughly 36 per group
  per pass.
* In the sixth pass the largest Table 1 counters reach 250, and 45,872
  mitigations follow. Once a Table 1 counter is at N_M, its reset counter is
  the largest Table 2 counter among the group's members, which is 255. So the
  group stays triggered, and every further counted activation of it starts
  another mitigation.

The paper estimates at most about 48 counted activations per group under
streaming. That figure fits a filter that counts each bank separately, not
the rule as written, which clears the other banks' bits on every counted
activation. Anyone relying on the streaming bound should keep this in mind.

**Refresh attack.** One row is hammered. With no other traffic, each
mitigation comes exactly N_M + 1 = 251 activations after the previous one.
The first activation after a mitigation only sets the bank's bit again, and
both reset counters are zero. Only the hammered row is refreshed.

## The mapping-capturing attack

An attacker who wants to find a row's two groups can try this: activate a
target row N_M - 2 times, activate two random rows, and activate the target
once more. If a mitigation happens, the random rows must have landed in the
target's groups. Counting counters alone, that needs at least one random row
in each of the target's two groups. With N groups per table, a trial succeeds
with probability p = (1 - (1 - 1/N)^2)^2. That is about 6e-8 for N = 8192,
and a new window brings new keys and voids whatever was learned.

`tb/tb_dapper_h_mapping.sv` runs 20,000 such trials on a small rank (256
rows, 2 banks, N = 4, N_M = 6), each in a fresh window.

* The random rows fall into the target's groups at the rate the formula gives
  (0.1905 against 0.1914). This shows that the keyed hash spreads rows
  evenly.
* The tracker triggers in only 150 trials. The bit-vector is the reason. The
  target's first activation only sets its bank's bit, so Table 1 ends one
  short. It reaches N_M only if both random rows fall in the target's Table 1
  group *and* in its bank. The testbench checks that the RTL triggers in
  exactly those trials.
* The formula is therefore an upper bound for this design. At full size, a
  single bank allows about 616K activations per window, and each trial needs
  about N_M of them. That leaves roughly 2.5K trials per window, for an
  overall success chance of 1 - (1 - p)^2500, about 1.5e-4 per window.

## Keys and the refresh window

Each table has its own `key_gen`: a 64-bit xorshift generator started from
the external 64-bit `seed`, XORed with a salt that is different for each table
and each rank. New keys are drawn when a clear sweep starts. A sweep starts at
reset and after every `refw_tick` from the window timer `refw_timer`. The
tables are SRAM-like arrays without a flash clear. So the sweep (state
`S_CLEAR`) zeroes one entry of each table per cycle: 8K cycles, or about 2 us
out of every 32 ms. Activations are held off while it runs. If a window ends
during a mitigation, the sweep starts once the mitigation has finished.

## Module map

| module | role |
|---|---|
| `dapper_pkg` | default sizes, salts, controller state type |
| `llbc_cipher` | 4-round Feistel cipher on a row address, encrypt or decrypt, combinational |
| `key_gen` | xorshift64 key source and round-key registers for one cipher |
| `rgc_table` | saturating counter array: update port, read port, write port |
| `bit_vector_table` | per-group, per-bank filter bits |
| `refw_timer` | refresh-window counter, one-cycle tick |
| `dapper_h_rank` | tracker for one rank: 2 key generators, 4 cipher engines, 3 tables, controller |
| `dapper_h_top` | one channel: a tracker per rank, shared timer, round-robin merge of refresh requests |

Interfaces of `dapper_h_top`:

* All streams use valid/ready. Data stays stable while valid is high and
  ready is low, and an assertion checks this.
* `act_valid/act_ready/act_rank/act_addr` is the activation stream from the
  memory controller. `act_ready` is the addressed rank's ready.
* `mit_valid/mit_ready/mit_rank/mit_addr` carries the aggressor rows to
  protect. The controller turns each request into victim-row refreshes, so the
  blast radius (1 or 2) or the choice of a DRFM command is the controller's
  business.
* `busy_clear`, `busy_mitigate`, `ev_filtered`, `ev_trigger` (one bit per
  rank) and `refw_tick` are status outputs.

## Where this RTL departs from or adds to the paper

Taken from the paper:

* the row-group counting;
* the double hashing with per-table keys that are renewed every window;
* the N_M = N_RH/2 trigger on both tables;
* the per-bank bit-vector rules for Table 1;
* refreshing only the rows shared by both groups;
* the reset-counter write-back and clearing the group's bit-vector;
* all default sizes (2M rows per rank, 256-row groups, one-byte counters,
  32 banks, 4 rounds of 16-bit keys, 96KB per 32GB).

Choices made here:

* **Cipher.** The paper accepts any low-latency lightweight block cipher
  (SCARF, for example). The Feistel network and round function here are
  simple and keep the permutation exact. They are not a vetted cipher.
  Replace `llbc_cipher` with a real one before relying on its secrecy.
* **Trigger.** The paper's text says both counters must *reach* N_M, and a
  figure caption says *equal to* N_M. The RTL uses `>=`, and its counters
  saturate instead of wrapping.
* **Parallelism.** The paper says several cipher engines work in parallel
  during a mitigation, without a number. Here there are four: one
  decrypt/encrypt pair per table, at one member per table per cycle.
* **Holding off activations.** Activations are held off during a mitigation
  and during the clear sweep. The clear is a one-entry-per-cycle sweep
  because the tables are SRAM.
* **Randomness.** The key source is a PRNG. A true random source, which the
  paper also allows, would drive `seed`.
* **Details the paper does not cover:** the address layout `{bank, row}`, the
  synchronous active-low reset, the valid/ready handshakes, round-robin
  merging of the ranks, and the per-rank seed derivation.
* **Counter width and larger thresholds.** The counter width is 8 bits. The
  paper's N_RH = 1K, 2K and 4K points need N_M of 500, 1000 and 2000, so set
  `CNT_BITS` to 9, 10 or 11 and `NM` to match.
* **Streaming bound.** Under the paper's own streaming scenario (about six
  activations per row in one window), the bit-vector rule as written lets
  mitigations start in the sixth pass. See the attack section above.
* **Not built:** the single-table DAPPER-S variant. The paper presents it as a
  stepping stone, not the proposed design.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb_ref_pkg` is a
behavioural model of the whole algorithm. It has its own integer-arithmetic
copy of the cipher and of xorshift, and counter, bit-vector and mitigation
bookkeeping done by brute force over group members. The tracker testbenches
compare the RTL against it:

* `tb_llbc_cipher`: checks the encryption against the model for random keys,
  checks that decryption undoes encryption, and checks that an 8-bit instance
  is a permutation.
* `tb_key_gen`, `tb_rgc_table`, `tb_bit_vector_table`, `tb_refw_timer`:
  check each unit against a small reference. They cover saturation, write
  priority, bit-vector hit/miss rules and the exact tick period.
* `tb_dapper_h_rank` runs a rank at reduced size (1K rows, 16-row groups,
  N_M = 6).
  * Traffic: hammering, a hot row set, bank-interleaved streaming, random
    rows, and a window reset.
  * Compared on every activation: the strobes.
  * Compared on every mitigation: the refreshed rows in order, the
    reset-counter values, and all three tables.
  * Timing checked: one activation per cycle, the sweep length, and the
    mitigation length.
* `tb_dapper_h_top` runs the two-rank channel end to end, at reduced size and
  with a 4000-cycle window.
  * It counts each mechanism and fails if one never occurs: boot and window
    clears, filtering, mitigation, several shared rows, non-zero reset
    values, refused refresh requests, both ranks competing for the refresh
    port, and refused activations.
* `tb_dapper_h_full` is the same test with `dapper_h_top` at its default
  parameters (2 x 2M rows, N_M = 250). It covers boot sweeps of the 8K-entry
  tables and real 250-activation triggers. The simulated time is far shorter
  than one 32 ms window.
* `tb_dapper_h_attacks` runs one full-size rank through the streaming attack
  (six passes over all 2M rows) and the refresh attack. It checks that no
  mitigation occurs in the first three passes, that every mitigation under the
  refresh attack refreshes the hammered row alone, and that each mitigation
  holds activations off for exactly 257 cycles.
* `tb_dapper_h_mapping` runs the mapping-capturing attack trial by trial at
  reduced size. It compares every trigger with the reference model and with
  the bit-vector rule, and compares the group hit rate with the formula.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/dapper_pkg.sv tb/tb_ref_pkg.sv tb/tb_dapper_h_top.sv \
  --top-module tb_dapper_h_top
./obj_dir/Vtb_dapper_h_top
```

Replace the file and top name to run another testbench. Every testbench
finishes in well under a second, except `tb_dapper_h_attacks`, which takes
about 20 seconds. It covers the streaming and refresh attacks described
above at full size. Verilator lint (`-Wall`) and the yosys-slang
front end accept all files in `rtl/` without errors. The remaining lint
warnings are unused package constants and the unused low bits of the hashed
address, which are the position inside a group.

### How far to trust it

The testbenches show that the RTL matches the algorithm as described in the
paper, as this design reads it. They do not show that the security analysis
holds for this cipher. They also do not cover the memory controller's side,
which issues the refreshes and accounts for the time a rank is held off. The
performance numbers in the paper come from a memory-system simulator; they
are not reproduced here.
