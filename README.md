# PIMMiner logic for an HBM-PIM stack

Graph pattern mining spends most of its time on three things: reading
neighbour lists, throwing away neighbours that break a symmetry restriction
(such as `v_x < v_0`), and the very uneven work that comes from a few
high-degree vertices. This RTL adds three small pieces of hardware to an
HBM-PIM stack, one for each problem:

- **Access filters beside each bank group.** They drop the neighbours that
  break a restriction before the data crosses the TSVs.
- **A local-first address mapping.** A PIM unit's graph data sits in its own
  bank group, not spread over every channel.
- **Per-channel stealing schedulers.** A unit that runs out of work takes part
  of a busy unit's loop nest and runs it.

The stack is 32 channels with 4 PIM units (bank groups) per channel, so there
are 128 units.

## Blocks

| file | what it is |
|---|---|
| `rtl/pimminer_pkg.sv` | Sizes, address struct, state and comparison encodings. |
| `rtl/access_filter.sv` | One 32-bit filter: registers for `cmp` and `th`, a subtractor, and a keep/NULL mux. It has 2 cycles of latency and accepts one word per cycle. |
| `rtl/bank_group_filter.sv` | Two filters per bank group, filling the 64-bit TSV beat. |
| `rtl/local_first_addr_map.sv` | Decodes addresses, gives the owning unit, classifies accesses, and composes an address from a unit ID and an offset. |
| `rtl/steal_scheduler.sv` | The per-channel table, 16 bits per unit: unit ID, state, related unit ID. Thieves claim victims atomically. |
| `rtl/task_table.sv` | A unit's Execution and Schedule tables, with the Load/Update, Steal Source and Steal Dest operations. |
| `rtl/steal_agent.sv` | Per-unit controller for task hand-out and the thief and victim protocol. |
| `rtl/rr_arbiter.sv` | Round-robin arbiter. Each channel scheduler uses one to take a single victim search per cycle. |
| `rtl/pimminer_top.sv` | The whole stack: 128 agents, 32 schedulers, 128 filter pairs and 128 address maps. |

### Address mapping

The physical address is 32 bits (4 GB):

```
[31:30] bank group  [29:25] channel  [24:10] row  [9:7] col_high
[6] bank  [5:3] col_low  [2:0] byte in the 64-bit beat
```

The unit ID is `addr[31:25]`, which is `{bank group, channel}`. IDs fill the
channels first and then the bank groups. A unit can therefore allocate a
contiguous 32 MB region that it owns outright, and interleaving across banks
still happens inside that region. The block also labels an access from a
given unit as near-core, intra-channel or inter-channel.

### Access filter

A neighbour-list read carries a restriction `(cmp, th)`. Each 32-bit word
`v_x` passes through two stages:

1. `v_x - th` is computed on 33 signed bits.
2. The sign of the result is tested against `cmp` (`<`, `=`, `>`, or "all").

If the test passes, the word goes on to the TSV. If it fails, the word's valid
bit is cleared (NULL).

### Work stealing

Each unit runs a nested loop with one level per pattern vertex, up to 5
levels. The unit holds two tables with one index per level:

- **Execution table:** the indices being worked on now.
- **Schedule table:** the indices to run next.

Roots are dealt out round-robin: unit `u` starts at root `u` and steps by 128.

**Getting work.** When the core asks for work, the unit loads the deepest
level that still has a task. In the same operation it advances that level in
the Schedule table and resets the deeper levels. When nothing is left, the
unit becomes a thief:

1. It writes state `10` into its own channel's scheduler.
2. It asks that scheduler for a unit in `01` (executing).
3. The scheduler claims the victim atomically: the victim goes to `11` and
   its related ID is set to the thief. The victim gets a steal request.
4. The victim briefly holds its core off the tables (`core_hold`) and runs
   Steal Source. This takes the shallowest level that still has a task, with
   the Execution prefix above it, and advances that level in the victim's own
   table.
5. The victim sends the cut-out table to the thief and goes back to `01`.
6. The thief runs Steal Dest, goes to `01` and executes the stolen subtree.

If the thief's own channel has no victim, it tries the next channel, and so
on around the stack. A unit stops (`00`, `unit_done`) after one full round
over the channels that finds no executing unit and no steal in progress.

## Own choices

These are decisions of this design, not taken from the published
architecture:

- **Tables in hardware.** The Execution and Schedule tables are hardware
  registers, and each table update is a single-cycle operation. The published
  design keeps the tables in PIM memory and updates them with code on the PIM
  core.
- **Claim-time locking.** The scheduler marks the victim `11` when it is
  claimed. Two thieves can never take the same victim.
- **Pinning.** A thief pins the levels down to the stolen level, so it runs
  only the stolen subtree. Its first load is not checked against bounds.
- **Bounds from the core.** The core supplies the candidate-set size for each
  level (`core_bound`). The level-0 bound is the number of vertices.
- **End of stealing.** A unit stops after one round over all channels that
  finds no unit in `01` and no unit in `11`. The published rule is "every
  unit is in `10`". Idle units (`00`) that have already stopped would block
  that rule from ever being met, and the round-based test also ends
  correctly while other thieves are still searching.
- **Level-0 steals.** The stolen table marks the levels below the stolen
  index as "nothing scheduled", not as 0. The thief's first load then starts
  the stolen index at the next level's first candidate, which has the same
  effect.
- **Empty answers.** A victim with nothing left sends an empty message, and
  the thief keeps searching.
- **Search arbitration.** Each channel scheduler takes one victim search per
  cycle through a round-robin arbiter. Claim answers come back one cycle
  later.

## Not included

The following parts are outside this RTL. Their signals are ports of
`pimminer_top`:

- the PIM cores;
- the DRAM banks;
- the channel controllers, TSVs and periphery;
- the host CPU, DMA and host software (graph loading, vertex duplication, the
  allocation interface).

`tb/pim_core_model.sv` is a behavioural core that counts k-cliques, for use in
the testbenches only.

## Simulation

Each `tb/tb_<block>.sv` is self-checking and ends by printing
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --top-module tb_pimminer_top rtl/pimminer_pkg.sv \
  $(ls rtl/*.sv | grep -v pkg) tb/pim_core_model.sv tb/tb_pimminer_top.sv
obj_dir/Vtb_pimminer_top
```

`tb_pimminer_top` runs the full 128-unit stack. It counts the 4-cliques of a
skewed 400-vertex graph twice, once with stealing off and once with it on.
Both counts must match a brute-force count done in the testbench, and the
stealing run must finish in fewer cycles. The testbench also checks that
every mechanism actually happens:

- steals at level 0 and at deeper levels;
- steals inside a channel and across channels;
- empty steals and victim hold cycles;
- all three access classes;
- filter words both passed and dropped.

`tb_steal_agent` is a smaller system: 4 units in 2 channels with 5-level
tables. Unit 0 owns every root, so the other units only get work by stealing
it. The testbench counts 3-, 4- and 5-cliques this way.

## How far it is tested

Every block has its own self-checking testbench:

- the filters against a reference pipeline;
- the address map against a reference decode;
- the task table with an exactly-once check on every index it hands out,
  covering ordinary walks and repeated steals.

The stealing protocol is tested end to end only with the behavioural core.
That core keeps a strict handshake: it requests a task, then supplies bounds
for it. A real core running the table code would need the same ordering.
Timing has not been closed for any technology. The scheduler claim path is
combinational across the 4 entries of a channel and is registered once.

The behavioural core counts cliques only. Non-clique patterns (diamond,
4-cycle) use the same tables, with a different core-side bound rule, and
are not simulated. In the full-size run with a skewed graph, stealing cut the
run from 4683 to 960 cycles (about 1400 steals). Without stealing, the busiest
unit carried 435 of the 4216 tasks.
