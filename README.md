# DRAMA: a content addressable memory built from unmodified DDR3

A content addressable memory (CAM) answers the question "which stored words
equal this query?" in one parallel step. CMOS CAMs are large and
power-hungry, so they stay small. DRAMA gets the same answer out of an
ordinary, unmodified DRAM rank. No cell, sense amplifier or decoder is
changed. The work is done by a memory controller that issues standard DDR3
commands (ACT, PRE, RD, REF) in a particular order and with particular gaps
between them.

This repository holds the SystemVerilog of that controller. It also has
self-checking testbenches and a command-level behavioural model of the DRAM
for simulation. The controller supports:

- exact search (binary CAM);
- ternary search with "don't care" bits (TCAM);
- approximate search that accepts a Hamming distance of 1;
- one-hot coded DNA bases, for k-mer search in genome classification.

At its default size it compares one query against 1,048,576 stored words in
a single request: 16 chips, 8 banks, and 8192 bit-columns per chip row.

## 1. The idea: a DRAM read is a compare

### Transposed storage

Each data word is stored down a **bit-column**, not along a row. Every
column of a bank holds a different word. Bit *j* of every word therefore
lies in the same row (or pair of rows) across the whole bank.

### Binary and ternary coding

A bit D of a stored word takes two cells of its column:

| row        | content |
|------------|---------|
| base+2j    | ~D      |
| base+2j+1  |  D      |

To compare bit *j* with query bit q, open one row with ACT. Open row
base+2j for q = 0, or row base+2j+1 for q = 1. In every column, the opened
cell holds 1 exactly where the stored bit equals q. After sensing, the row
buffer therefore holds XNOR(q, D) for every stored word at once. This is an
ordinary row activation: the query is carried by the **row address**, and
the data bus is never used.

A ternary "don't care" is stored as 11. Either row then reads 1, so the bit
never causes a mismatch.

### One-hot DNA coding

A DNA base takes four cells: A = 0001, G = 0010, C = 0100, T = 1000.

- Base *j* of a k-mer occupies rows base+4j ... base+4j+3, with A at offset
  0, G at 1, C at 2 and T at 3.
- The query base opens only the row of its own code.
- That row reads 1 wherever the stored base is the same.

So one base costs one activation. It uses the same four cells per base as
binary coding with two bits.

## 2. Computing inside the DRAM with timing alone

One XNOR row per symbol is not a search result. The per-symbol rows must be
ANDed together. Two known timing tricks of commodity DDR3 do that. They
are the hardest part of the design to understand.

### Row copy: CPY(dst, src)

The command sequence is: PRE, ACT src, PRE after the normal tRAS, then ACT
dst after a precharge cut far below tRP.

The bitlines never return to the precharge level. The sense amplifiers
still drive src's data when dst opens, so they overwrite dst with it.

### Majority AND/OR

The command sequence is: PRE, ACT R1, PRE, ACT R2, with **both** gaps at
the minimum.

Three rows end up on the bitlines at once:

- R1;
- R2;
- R3, which is R1's address with its two low bits cleared.

Each column settles to the bitwise majority, which is written back into all
three rows. The row addresses must follow a rule: R3, R1 and R2 end in 00,
01 and 10, and share all upper address bits.

- If R1 holds zeros, the majority is R2 AND R3.
- If R1 holds ones, it is R2 OR R3.

### Reserved rows

A block of rows near the top of each bank (`RSV_BASE`, default 0xFFF0) is
set aside:

| row | offset | use |
|-----|--------|-----|
| R3  | +0 | XNOR of the current symbol (copied in from the query row) |
| R1  | +1 | the constant that selects AND or OR |
| R2  | +2 | running match result |
| C0  | +4 | all zeros, written once by the host |
| C1  | +5 | all ones, written once by the host |
| RA, RB, RC | +6 .. +8 | scratch rows of the approximate search |

## 3. The search programs

Each step of a search is four commands long: PRE, ACT, PRE, ACT.

- A **copy** step uses a normal tRAS and a shortened tRP.
- A **logic** step uses the minimum for both.

"Q" below is the row that encodes query symbol *j* (section 1).

```
NAND (exact / ternary)   init  CPY(R2,C1)
                         loop  CPY(R3,Q)  CPY(R1,C0)  AND          R2 = R2 & xnor_j

NOR                      init  CPY(R2,C0)
                         loop  CPY(R3,~Q) CPY(R1,C1)  OR           R2 = R2 | mismatch_j
                         (query inverted, result 0 = match, don't care stored as 00)

APPROX, HD <= 1          init  CPY(R2,C1) CPY(RB,C1) CPY(RC,C1)
                         loop  CPY(R3,Q)  CPY(RA,R3)  CPY(R1,C0)  CPY(R2,RB)  AND
                               CPY(R3,C1) CPY(R2,RB)  CPY(RB,R1)  CPY(R1,RA)  OR
                               CPY(R1,C0) CPY(R2,RC)  AND         CPY(RC,R2)
```

### The approximate search

- RB holds the running exact match, exact_j = exact_{j-1} & xnor_j.
- RC holds the running "at most one mismatch so far":
  approx_j = approx_{j-1} & (xnor_j | exact_{j-1}).

  A column stays a candidate if this symbol matches, or if every earlier
  symbol did. That allows at most one mismatch in total.
- The final result is RC, which is copied into R2.

The step `CPY(RB,R1)` is this design's addition. Without it, RB keeps its
initial all-ones value. The filter then accepts every mismatch pattern, not
just one mismatch.

### After the loop

1. The sequencer activates R2 normally.
2. It reads the row out, NCOL column bursts per bank.
3. It closes the bank.

### Cost per symbol

| mode | copies per symbol | logic operations per symbol |
|------|-------------------|-----------------------------|
| NAND / NOR | 2  | 1 |
| APPROX     | 11 | 3 |

## 4. Running eight banks in parallel

A request carries a `bank_mask`. The same query runs in every selected bank,
and each bank holds different words. The banks share one command bus, so the
steps are interleaved with one rule: the two timing-critical commands of a
step stay adjacent within a bank.

- **Copy step:** PRE to every bank, then ACT src to every bank. Then, bank
  by bank, the adjacent pair PRE, ACT dst. The ACT dst follows its PRE in the
  very next bus cycle, so the shortened tRP holds.
- **Logic step:** PRE to every bank. Then, bank by bank, the triple ACT R1,
  PRE, ACT R2 with minimal gaps.
- **Read-out:** R2 is opened in every bank. The banks are then read one
  after another, lowest bank first.

While one bank waits out its tRAS, the others use the bus. Eight banks
therefore cost far less than eight times one bank (section 7).

## 5. Controller structure

```
            request                      timing registers (tcfg)
               |                                 |
      +--------v---------+   op stream   +-------v--------+  ACT/PRE/RD/REF
      | drama_compare_seq|-------------->| drama_cmd_timer|------------------> DRAM rank
      |  (drama_row_map) |  valid/ready  +-------^--------+   bank,row,col      (16 chips,
      +------------------+                       |  REF                         same bus)
                                     +-----------+--------+                        |
                                     | drama_refresh_timer|                        | rd_valid,
                                     +--------------------+                        | rd_data
      results  <------------------ drama_result_collect <---------------------------+
```

**`drama_compare_seq`** turns one request into the command list of
sections 3 and 4.

- Its step tables are functions of the mode, the phase and the step number.
- `drama_row_map` turns query symbol *j* into its row address.
- It refuses the following requests with `err`:
  - a query length of 0, or one longer than the query register;
  - an empty bank mask;
  - NOR with one-hot coding. An inverted one-hot base would need three rows.
- Each command is offered on a valid/ready handshake. A new command is
  offered in the cycle after the previous one is taken.

**`drama_cmd_timer`** is a DDR3 command scheduler with programmable gaps.

- Each command class has its own rule:

  | command | waits for |
  |---------|-----------|
  | ACT | tRP, or `trp_copy`, or `trp_logic`, after PRE in its bank |
  | PRE | tRAS and tRTP, or `tras_logic` for a logic step |
  | RD  | tRCD after ACT, and tCCD after the previous RD |
  | REF | all banks closed |

  Every command also waits tRFC after a REF.
- It issues a command in the first cycle its gap allows. A requester that
  offers the next command at once therefore gets the exact gap, not just a
  lower bound, and the copy and logic regimes depend on that.
- The bus outputs are registered: a command taken in cycle t appears on
  `dram_cmd` in cycle t+1.

**`drama_refresh_timer`** handles auto-refresh.

- A compare restores the cells it reads, and a search is very short next to
  the 64 ms retention time. So no refresh is issued during a search.
- Refresh credits build up at one per tREFI, up to eight owed. They are paid
  back with REF commands once the controller is idle.
- A credit earned while eight are already owed is dropped, and `ref_missed`
  pulses so that the host can see it.

**`drama_result_collect`** gathers the result rows as they are read out.

- It numbers the bursts by bank and column.
- It inverts NOR results, so its output always uses 1 = match.
- It counts the matches.
- The host finds which reference word (in the genome use, which species)
  matched from the bank, column burst and bit position.

## 6. Using `drama_top`

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| CHIPS | 16 | chips driven in lockstep on one command bus |
| BANKS | 8 | banks per chip |
| NCOL | 128 | column bursts per row |
| BURST_BITS | 64 | bits each chip returns per burst |
| QMAX | 64 | query register width (32 DNA bases) |
| RSV_BASE | 0xFFF0 | first reserved row |

One row read returns DW = CHIPS × BURST_BITS = 1024 bits.

### Request

The controller takes a request in a cycle where `start` is high and `busy`
is low.

| field | meaning |
|-------|---------|
| `mode` | NAND, NOR or APPROX |
| `enc` | binary or one-hot |
| `bank_mask` | banks to search |
| `base_row` | first row of the stored slot |
| `qlen` | number of bits or bases |
| `query` | bit j in `query[j]`; base j in `query[2j+1:2j]`, with A=0, G=1, C=2, T=3 |

An illegal request pulses `err` and is dropped.

### Results

- Each burst arrives as `res_valid` with `res_bank`, `res_col` and
  `res_data`, where 1 = match.
- `match_count` holds the total number of matches.
- `done` pulses with the last burst.

### Timing registers

`tcfg` is a `drama_timing_t` value, counted in command-clock cycles. The
defaults in `drama_pkg::TIMING_DEFAULT` are:

| register | default |
|----------|---------|
| tRCD, tRP | 11 |
| tRAS | 28 |
| tCCD | 4 |
| tRTP | 6 |
| tRFC | 128 |
| tREFI | 6240 |
| copy tRP | 1 |
| logic tRAS, logic tRP | 1 |

Most are DDR3-1600 values. The copy and logic gaps are the DRAM-specific
values a user would tune.

### What the host must do

Loading the database is plain DRAM writes and is not part of this
controller. The host must:

- write every stored word transposed, in the coding of section 1;
- write C0 (all zeros) and C1 (all ones) in every bank it searches;
- leave the reserved rows alone.

The layout gives 511 slots of 128 rows in a 64K-row bank, so one column can
hold many k-mers. `base_row` picks the slot to search.

## 7. Performance at the default size

These are measured with the DDR3-1600 defaults for a 32-base one-hot k-mer,
counted from the first command to the last result:

| search | banks | words | cycles | rate at 800 MHz |
|--------|-------|-------|--------|-----------------|
| exact  | 1 | 131,072   | 6,275  | 16.7 Gkmers/s |
| exact  | 8 | 1,048,576 | 10,471 | 80 Gkmers/s   |
| HD <= 1 | 8 | 1,048,576 | 34,679 | 24 Gkmers/s  |

Of the 10,471 cycles of the eight-bank exact search, 4,096 are the
read-out: 8 banks × 128 bursts × tCCD. Without the read-out the compare
alone runs at about 132 Gkmers/s.

The published evaluation quotes 149 Gkmers/s for this configuration. That
corresponds to about 5,600 cycles per search, roughly one bank's compare
time with eight banks fully overlapped and the read-out not counted. The
shared command bus and the read-out keep this controller below that figure.

The single-bank time follows a closed formula, which the testbenches check
exactly:

```
(tRP + tRAS + trp_copy)                                    init copy
+ m * ( 2*(2*tRAS + tRP + trp_copy)                        two copies
        + (tRAS + tRP + tras_logic + trp_logic) )          one AND
+ tRAS + tRP + tRCD + (NCOL-1)*tCCD + CL + 2               read-out
```

## 8. Where this design departs from, or adds to, the published scheme

The following follow the published scheme:

- the storage codes;
- compare-by-read;
- the copy and majority operations with their row-address rule;
- the NAND, NOR and approximate programs;
- the NOR result inversion;
- the refresh policy.

The following are this design's choices:

- **Approximate search fix.** It adds the step `CPY(RB,R1)`, which updates
  the exact-match row. The published listing omits it (section 3).
- **NOR program.** It mirrors the NAND one: R2 starts from C0 and R1 is
  preset from C1. It is described in words only.
- **Row order.** The cell order inside a bit pair or a group of four (~D in
  the even row; A at offset 0) is one consistent reading of the published
  codes.
- **Reserved row positions.** The positions of C0, C1, RA, RB and RC are
  this design's. Only the low-bit rule for R1, R2 and R3 is fixed.
- **Timing defaults.** DDR3-1600 is assumed: no speed grade is given. The
  copy and logic gaps of one cycle are assumed too. A real part may need
  other values, which is why they are registers.
- **Bank-parallel schedule.** The whole of section 4 is this design's.
- **tRRD and tFAW are not enforced.** In the bank-parallel copy steps, ACTs
  to eight banks go out back to back. A part that enforces the four-activate
  window would need larger gaps there.
- **Read-out.** Each search ends by reading its result row through the
  controller, counting matches and tagging bursts.
- **Refresh bookkeeping.** Credit counting with eight postponed refreshes is
  this design's.

The following are not built:

- **Aggregating several searches' results inside the DRAM with bulk logic.**
  This is mentioned as an alternative to reading results out. A host can
  still do it by reading the results and combining them.
- **Alternating NAND and NOR searches.** This is suggested as a way to
  refresh "sticky" cells. Plain binary data (no don't cares) can be searched
  in either mode from the same rows, but choosing when to alternate is left
  to the host.
- **The DRAM chips, the host-side loading of the transposed database, and
  the taxon lookup.** These lie outside the controller.

## 9. Verification

`tb/dram_rank_model.sv` is a behavioural DRAM used by the testbenches. It
works at command level:

- Each bank has its own row buffer and its own ACT/PRE history.
- An ACT after a PRE gap of 3 cycles or less performs a copy.
- If the ACT before that PRE was also 3 cycles or less earlier, the ACT
  performs the three-row majority instead, and counts any violation of the
  R1/R2/R3 address rule.
- RD data returns CL cycles later.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_drama_row_map` | every coding rule, exhaustively over many bases, indices and symbols |
| `tb_drama_cmd_timer` | random command streams over random banks and two timing sets; every issue cycle against an independent model of the earliest legal cycle |
| `tb_drama_compare_seq` | NAND, NOR, NAND-TCAM, NOR-TCAM, approximate and one-hot searches against a per-column reference; the copy and logic counts; the exact NAND cycle count |
| `tb_drama_result_collect` | burst numbering over one and several banks, NOR inversion, match count, the single done pulse |
| `tb_drama_refresh_timer` | credit pacing, no requests during a search, pay-back, the missed-credit pulse |
| `tb_drama_top` | every mode on a reduced rank, in one bank and in several banks with different data per bank, with a short refresh interval; NOR and NAND also alternate over the same stored rows |
| `tb_drama_top_full` | the default size with no parameter overrides (next paragraph) |

`tb_drama_top` also counts the mechanisms it exercised and fails any that
never happened:

- row copy;
- in-DRAM AND/OR;
- NOR inversion;
- refresh;
- missed refresh credit;
- refused request;
- bank-parallel search.

`tb_drama_top_full` stores random 32-mers with planted exact and one-base-off
copies in all eight banks. It runs three searches and checks all 1,048,576
result bits and the match count of each:

- exact in one bank;
- exact in eight banks;
- approximate in eight banks.

It also checks the single-bank cycle formula.

To simulate with Verilator 5, run this from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/drama_pkg.sv rtl/drama_row_map.sv rtl/drama_compare_seq.sv \
  rtl/drama_cmd_timer.sv rtl/drama_refresh_timer.sv rtl/drama_result_collect.sv \
  rtl/drama_top.sv tb/dram_rank_model.sv tb/tb_drama_top.sv \
  --top-module tb_drama_top -o sim && obj_dir/sim
```

Replace the last testbench and top-module name to run another testbench.
The block testbenches need only the package, their block, the blocks it
instantiates and, for the sequencer, the DRAM model. The full-size run
takes a few seconds and about 30 MB.

## 10. Files

| file | content |
|------|---------|
| `rtl/drama_pkg.sv` | command, mode and coding enums; the command record; the timing set; reserved-row offsets |
| `rtl/drama_row_map.sv` | query symbol to row address |
| `rtl/drama_compare_seq.sv` | search programs and the bank-parallel schedule |
| `rtl/drama_cmd_timer.sv` | command issue under normal, copy and logic timing |
| `rtl/drama_refresh_timer.sv` | refresh credits, idle-only refresh |
| `rtl/drama_result_collect.sv` | result bursts, NOR inversion, match count |
| `rtl/drama_top.sv` | top level: request in, DRAM bus out, results out |
| `tb/dram_rank_model.sv` | behavioural DRAM rank (simulation only) |
| `tb/tb_*.sv` | testbenches (section 9) |
