# HiRA memory controller: hiding DRAM refreshes behind row activations

A DRAM row must be refreshed periodically. It must also be refreshed *preventively* when a
RowHammer defence decides that a neighbouring row was activated too often. Each refresh keeps
the bank busy for a full row cycle (tRC, about 46 ns), and memory accesses to that bank wait
behind it.

**Hidden Row Activation (HiRA)** lets an off-the-shelf DDR4 chip work on two rows of the same
bank at once, provided the rows lie in subarrays that share no bitline and no sense
amplifier. The controller sends this command sequence:

    ACT RowA  --t1-->  PRE  --t2-->  ACT RowB          (t1 = t2 = 3 ns)

The PRE arrives before RowA's wordline has closed. So RowA keeps restoring its charge while
RowB is opened, and both rows are later closed by a single PRE. If RowA is a row to refresh,
its refresh costs 6 ns of command time instead of a full tRC. Two cases follow:

- If RowB is a row that a memory access wants, the refresh is hidden behind the access
  (refresh-access parallelism).
- If RowB is another row to refresh, two refreshes take little more than the time of one
  (refresh-refresh parallelism).

The RTL here is the memory-controller side of the scheme, for one DRAM rank. It keeps refresh
requests with deadlines instead of issuing rank-level REF commands. Each refresh waits, up
to its deadline, for an activation to hide behind. It is forced only when the deadline is
near, and then it is paired with a second refresh where possible.

## The command sequence and its timing

All times are cycles of a 3 GHz controller clock (`hira_pkg`):

| quantity | ns | cycles |
|---|---|---|
| t1 (ACT to PRE inside HiRA) | 3 | 9 |
| t2 (PRE to ACT inside HiRA) | 3 | 9 |
| tRAS | 32 | 96 |
| tRP | 14.25 | 43 |
| tRC | 46.25 | 139 |
| tFAW (four ACTs per rank) | 16 | 48 |
| periodic request interval | 60.9 | 182 |
| tRefSlack (time a refresh may wait) | 4 tRC = 185 | 556 |

`hira_cmd_seq` turns one *row operation* into commands. The operations are:

- `OP_ACT`: open a row.
- `OP_HIRA_ACC`: ACT refresh row, PRE, ACT access row. The access row stays open.
- `OP_REF`: ACT, then PRE after tRAS.
- `OP_HIRA_REF`: ACT, PRE, ACT, then PRE after tRAS.
- `OP_PRE`: close the bank.

It keeps per-bank counters of the time since the last ACT and PRE, so tRAS, tRP and tRC hold
for every ordinary command. The PRE and second ACT inside a HiRA sequence are exempt: they sit
exactly t1 and t2 after the command before them.

Both ACTs of a HiRA sequence count towards tFAW. So the first ACT is issued only when the
four-activation window (`faw_limiter`) has room for both.

Measured on the bus, refreshing one row and then activating another in the same bank takes:

- 114 cycles with HiRA (38 ns);
- 235 cycles one after the other (78.3 ns).

That is 52% less. The ACT-to-ACT part of this figure is checked in `tb_hira_cmd_seq`.

## Blocks and how a refresh travels through them

```
            refresh_en                       pth      act_valid/bank/row (from scheduler)
                |                             |             |
        +-------v--------+            +-------v-------+     |
        | periodic_rc    |            | preventive_rc |<----+---- ACTs on the bus
        | generator      |            |  para (LFSR)  |     |
        | refptr_table   |            |  pr_fifo x16  |     |
        +---+--------^---+            +---+-------^---+     |
   insert   |        | lookup/advance     | insert | head/pop
        +---v--------+------------------- v ------+---+     |
        |        refresh_table (68 x deadline,bank,type)  |     |
        +-----------------------^-------------------------+     |
                                | search / retire               |
                   +------------+-------------+   spt (128x128) |
                   | concurrent_refresh_finder|<---------------+|
                   |  Case 1: query per ACT   |<----------------+
                   |  Case 2: deadline check  |
                   +------------+-------------+
                                | HiRA / ACT / refresh
                        +-------v--------+
                        | hira_cmd_seq   |--> cmd, cmd_bank, cmd_row (ACT / PRE)
                        | faw_limiter    |
                        +----------------+
```

### Periodic refresh (`periodic_rc`, `refptr_table`)

Every 182 cycles the Refresh Generator creates one request, for the banks in turn. This
refreshes each bank's 64K rows once per 64 ms window: 8 rows per 7.8 µs per bank is one row
per 975 ns, and 975/16 = 60.9 ns.

A request carries only a bank and a deadline (now + tRefSlack). Which row is refreshed is
decided later, when the refresh is performed. The RefPtr Table keeps one 10-bit pointer per
subarray (128 subarrays × 16 banks) to the next row to refresh there. A lookup gets a mask of
acceptable subarrays and returns the one whose pointer is lowest, that is, the one with the
fewest rows refreshed so far. So pointers advance evenly while HiRA exploits whichever
subarrays are free.

A subarray that has refreshed all its rows is marked done for the current window. When every
subarray of a bank is done, the bank starts a new window.

### Preventive refresh (`preventive_rc`, `para`, `pr_fifo`)

The RowHammer defence is PARA. On every activation by an access, with programmable
probability `pth` (×2⁻¹⁶), it requests a refresh of one of the two adjacent rows, chosen at
random. Each neighbour is therefore refreshed with probability pth/2.

The victim row goes into the bank's 4-entry PR-FIFO. In the same cycle, a Preventive entry
with the same deadline rule goes into the Refresh Table.

Four entries suffice: a bank accepts at most one activation per tRC, so at most four victims
can appear within tRefSlack = 4 tRC. A one-entry holding register covers the case where the
FIFO is full anyway (for instance when refreshes run late under overload). A request that
arrives while the register is occupied is dropped and counted in `stats.preventive_drop`.

### The Refresh Table (`refresh_table`)

The table has 68 entries, each a 10-bit deadline, a 4-bit bank and a 2-bit type
(invalid/periodic/preventive). 68 is the most that can be pending: 4 periodic requests per
rank plus 4 preventive requests per bank, within one tRefSlack.

Deadlines are absolute times modulo 1024, compared with a free-running counter. The time left
is `deadline - now` modulo 1024. Values above tRefSlack are read as negative, meaning
overdue. This works as long as no entry becomes more than 1024 - 557 = 467 cycles overdue.

Every search runs over all entries in parallel in one cycle:

- the earliest Periodic entry of a given bank;
- the earliest Preventive entry of a given bank, optionally excluding one entry;
- the earliest entry of the whole rank.

### Finding a refresh to hide (`concurrent_refresh_finder`)

This is the heart of the design.

**Case 1: refresh-access.** The scheduler hands an activation (bank, RowA) to the top. The
top closes the bank (the PRE that precedes every activation) and, in the same cycle, asks the
finder whether a queued refresh can ride along. The finder uses the SPT row of RowA's
subarray, which lists the isolated subarrays, and tests two candidates:

- **Periodic.** If the bank has a Periodic entry, ask the RefPtr Table for the least-advanced
  isolated subarray that still has rows to refresh.
- **Preventive.** If the bank has a Preventive entry, test whether the PR-FIFO head lies in
  an isolated subarray.

Of the candidates that succeed, the one with the earlier deadline wins. The top then issues
`HiRA(refresh row, RowA)`. If neither succeeds, it issues a plain `ACT(RowA)` and the
refreshes stay queued: the access is not delayed for them.

Testing only these two entries is enough, for two reasons:

- Periodic entries of a bank differ only in deadline, since the row is chosen by the RefPtr
  Table at service time. So every Periodic entry gives the same answer.
- Preventive entries are served in FIFO order, and the earliest-deadline Preventive entry is
  exactly the one whose row is at the FIFO head.

The result is therefore the same as walking the bank's entries in deadline order. But it
costs one table access instead of up to 68, and the answer is ready 2 cycles (0.67 ns) after
the query. The bank's precharge takes 43 cycles, so the lookup is completely hidden. In the
same clock edge the entry is retired, and either the RefPtr pointer advances or the PR-FIFO
pops.

**Case 2: deadlines.** A timer fires every tRC. The finder then looks at the rank-wide
earliest entry.

- If its deadline is more than tRC away, nothing happens. The refresh keeps waiting for an
  access to hide behind; `stats.idle_checks` counts these checks.
- Otherwise it becomes RowC and is forced. RowC is the least-advanced subarray's next row
  for a periodic entry, or the FIFO head for a preventive one. The finder then looks for a
  second queued refresh of the same bank in a subarray isolated from RowC's: a periodic row
  through the RefPtr Table, or the PR-FIFO head if RowC was periodic.
  - If one exists, the top issues `HiRA(RowC, RowD)`.
  - If not, it issues a nominal refresh of RowC.

After a forced refresh is accepted, the check repeats immediately, so refreshes that fall due
together are issued back to back. Forced refreshes take priority over new activations.

### Subarray Pairs Table (`spt`)

The SPT is a 128 × 128 bit matrix: bit *j* of row *i* is set when subarrays *i* and *j* share
no bitline or sense amplifier. Which subarrays are isolated is a property of the chip. It is
found by testing the chip and is loaded through `spt_wr_*` after reset. Reset clears the
table, so HiRA is not used until it is programmed. The same table serves all banks.

## Top level (`hira_mc`)

| port | dir | meaning |
|---|---|---|
| `refresh_en` | in | start periodic refresh generation |
| `pth[15:0]` | in | PARA probability × 2¹⁶ |
| `spt_wr_en`, `spt_wr_sa[6:0]`, `spt_wr_vec[127:0]` | in | program one SPT row per cycle |
| `act_valid`, `act_bank[3:0]`, `act_row[15:0]` | in | scheduler wants to open this row |
| `act_ready` | out | activation accepted; its ACT follows after the precharge |
| `op_done` | out | pulse after the last command of each row operation |
| `bank_open[15:0]` | out | banks with an open row (for the scheduler's column commands) |
| `cmd` (`CMD_NOP`/`CMD_ACT`/`CMD_PRE`), `cmd_bank`, `cmd_row` | out | DRAM command bus, one command per cycle |
| `stats` (`hira_stats_t`) | out | counters: HiRA-for-access, HiRA-for-two-refreshes, single refreshes, plain ACTs, periodic and preventive requests, preventive drops, idle deadline checks |
| `windows_done`, `rt_occupancy` | out | refresh windows completed; Refresh Table entries in use |

The request scheduler itself (FR-FCFS with open-row policy) is outside this design. So are
RD/WR column commands and the DDR4 PHY. The top only decides how rows are opened and
refreshed.

Row addresses are `{subarray[6:0], row-in-subarray[8:0]}`. Subarrays are assumed to be
contiguous blocks of 512 rows.

Parameters of `hira_mc` and of each block default to the sizes above. Every size and timing
parameter can be overridden: banks, subarrays, rows per subarray, table entries, FIFO depth
and all cycle counts.

## Where this design departs from the paper it is based on

- **Parallel table search.** The searches run in parallel instead of iterating over the 68
  entries serially. The answer is the same, with a 2-cycle latency instead of about 6.3 ns.
- **Case 1 trigger.** Case 1 is triggered by the activation request itself, in the cycle its
  PRE is issued. It is not triggered by observing a PRE on the bus.
- **One operation at a time.** The command sequencer performs one row operation at a time for
  the whole rank. Bank timing is tracked per bank, so the bus is correct, but operations to
  different banks do not overlap. A production controller would interleave banks. This
  simplification lowers throughput and makes forced refreshes wait behind the operation in
  flight.
- **Case 2 re-check.** After a forced refresh, Case 2 re-checks immediately rather than at
  the next tRC tick.
- **RowD choice.** A preventive RowC is only paired with a periodic RowD, because only the
  FIFO head of the bank is visible.
- **Periodic request interval.** 60.9 ns is rounded down to 182 cycles, so rows are refreshed
  slightly more often than required, never less.
- **tRP.** The paper uses both 14.25 ns and 14.5 ns for tRP. 14.25 ns (43 cycles) is used
  here.
- **Random source.** PARA's random numbers come from a 32-bit LFSR. That is adequate for
  simulation, but a deployed defence needs a better generator.
- **Overdue refreshes.** A refresh is forced when its deadline is under tRC away. It is
  therefore normally issued on time, or at most one operation late. Under overload it can be
  later: one such case is PARA at probability ~1 with nothing to pair, hammering two banks
  back to back. A refresh that becomes more than 467 cycles overdue would wrap in the 10-bit
  deadline arithmetic.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_refresh_table` | random inserts/retires against a reference model; all searches; full table |
| `tb_refptr_table` | small sizes; every row refreshed exactly once per window; least-advanced choice under masks |
| `tb_periodic_rc` | 182-cycle period, bank rotation, deadline = now + 556, backlog when the table is full |
| `tb_para` | measured refresh rates for several `pth`; victim is an adjacent row; bank edges |
| `tb_pr_fifo` | random push/pop against a queue model |
| `tb_preventive_rc` | insert + enqueue together, holding register, drop counting |
| `tb_spt` | writes and both read ports |
| `tb_faw_limiter` | random ACT streams: no 5 ACTs in 48 cycles, pair check |
| `tb_hira_cmd_seq` | exact t1/t2 gaps, HiRA vs. nominal latency, tRAS/tRP/tRC/tFAW monitor on random operations |
| `tb_concurrent_refresh_finder` | directed Case 1 and Case 2 scenarios on real tables at small size, including 2-cycle answer latency |
| `tb_hira_mc` | whole controller at full size (see below) |

`tb_hira_mc` runs the complete controller at its default size with a scheduler stand-in,
through four phases:

1. mixed traffic;
2. idle;
3. overload with no pairable subarrays;
4. one-bank traffic followed by idle.

It checks the following on the command bus:

- all DRAM timing, and the exact HiRA gaps;
- that the two rows of every HiRA sequence are SPT-paired;
- that every requested activation produces exactly one ACT of its row;
- that refresh ACTs equal periodic plus preventive requests minus those still pending;
- the bound on lateness.

It counts, and requires, each mechanism:

- periodic and preventive refreshes hidden behind an access;
- plain ACT;
- forced refresh-refresh HiRA;
- forced single refresh;
- deadline check with nothing due;
- PARA request;
- PR-FIFO full.

It runs in a few seconds.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/hira_pkg.sv tb/tb_hira_mc.sv \
          --top-module tb_hira_mc -Mdir obj && ./obj/Vtb_hira_mc
```

Synthesis note: at full size the RefPtr Table is 20 Kbit of pointers and the Refresh Table
compares 68 entries. Both are written as flip-flop arrays with parallel comparator trees, so
generic synthesis of the full top is slow. Smaller parameter sets synthesize quickly.

## Files

- `rtl/hira_pkg.sv`: sizes, timing, enums (`rtype_e`, `op_e`, `cmd_e`), statistics struct.
- `rtl/refresh_table.sv`, `rtl/refptr_table.sv`, `rtl/periodic_rc.sv`, `rtl/para.sv`,
  `rtl/pr_fifo.sv`, `rtl/preventive_rc.sv`, `rtl/spt.sv`,
  `rtl/concurrent_refresh_finder.sv`, `rtl/faw_limiter.sv`, `rtl/hira_cmd_seq.sv`: the
  blocks.
- `rtl/hira_mc.sv`: top level.
- `tb/tb_*.sv`: one testbench per block plus the end-to-end test.
