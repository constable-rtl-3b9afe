# Constable: eliminating the execution of stable loads

Many loads in real programs read the same value from the same address, over and
over. Examples are a global read through a PC-relative address, a function
argument reloaded from the stack, or a field of an object that never changes.
A value predictor can guess such a value, but it must still execute the load to
verify the guess. That costs a reservation-station entry, an address-generation
slot and an L1 read port, and those are exactly the resources a wide core runs
short of.

The engine in this repository goes one step further. It does not execute these
loads at all, and it needs no verification, because the value cannot be stale.
It learns which static loads are stable. For each one it then watches the two
things that could change the result:

1. **The address.** The address can only change if a source register of the
   load is written.
2. **The data.** The data can only change if a store, or another core's write
   (seen as a snoop), touches the load's cache line.

While neither has happened, the next instance of the load is answered at rename
with the last value. The load becomes a register move from a small extra
register file, and it needs no RS entry, AGU or load port.

All of this is synthesizable SystemVerilog in `rtl/`, with self-checking
testbenches in `tb/`.

## The three tables

| Table | Indexed by | Entry | Size (default) |
|---|---|---|---|
| **SLD**, stable load detector | hashed load PC | 24-bit tag, last address (low 32 bits), last value (64 bits), 5-bit confidence, `can_eliminate` | 32 sets × 16 ways = 512 loads |
| **RMT**, register monitor table | architectural register | list of hashed PCs of eliminable loads that use the register as a source | 16 slots for RSP and RBP, 8 for each of the other 14 (144 slots) |
| **AMT**, address monitor table | physical cache-line address | 32-bit line tag and up to 4 hashed PCs of eliminable loads that read the line | 32 sets × 8 ways = 256 lines |
| **xPRF**, extra register file | — | value of an in-flight eliminated load | 32 × 64 bits |

A load is identified everywhere by a 24-bit signature. The signature is an XOR
fold of the 64-bit PC (`constable_pkg::pc_sig`). Its low 5 bits select the SLD
set, and all 24 bits form the tag.

## Life of a stable load

**Learning (writeback).** Every completed load that was not eliminated trains
its SLD entry:

- Same address and same value as last time: the confidence goes up by one,
  saturating at 31.
- Anything else: the confidence is halved, the new address and value are
  stored, and `can_eliminate` is cleared.
- A miss allocates an entry with confidence 0.

**Likely-stable (rename).** When a load is renamed with confidence ≥ 30 and
`can_eliminate` still clear, it is marked *likely-stable*. It still executes
normally. At its writeback, if it matched again, three things happen:

1. Its PC is entered in the RMT list of each source register.
2. Its PC is entered in the AMT entry of its cache line. A new entry is made if
   the line has none.
3. `can_eliminate` is set in the SLD.

At the same time, `pin_valid` asks the coherence directory to keep this core's
presence bit for the line. A silent eviction from the private caches must not
stop snoops for that line from reaching the core.

**Elimination (rename).** A load whose entry has `can_eliminate` set gets an
xPRF register loaded with the stored value. `ren_res.eliminate` tells the core
to turn the load into a move from that register. `ren_res.addr` gives the
stored address, which the load still needs for its load-buffer entry (see
*Ordering against in-flight stores*). If no xPRF register is free, the load
executes normally.

**Invalidation.** Three events reset `can_eliminate`:

- **Register write.** Every renamed uop looks up the RMT with its destination
  register. All PCs in that list are reset in the SLD, and the list is emptied.
- **Store or snoop.** When a store's physical address is generated, or a snoop
  arrives, the AMT is probed with the line. On a hit, the entry's PCs are reset
  and the entry is evicted.
- **Mapping change.** `flush_all` (for example on a context switch) clears
  every flag and empties the RMT and AMT.

A load whose flag was reset simply executes again. Its confidence stays high,
so its next instance is likely-stable again and can re-arm the flag.

## Bandwidth: where rename stalls

The SLD has three lookup ports and two reset ports. These limits show up as
rename stalls:

- **More than three loads.** A rename group of up to six uops is held until all
  its loads have been looked up, three per cycle, oldest first (`stall_rd`).
- **More than two resets.** Resets come from the RMT (register writes) and from
  the AMT reset buffer (store and snoop hits). `clear_arbiter` grants at most
  two per cycle, AMT first. The group is held while any RMT reset it caused is
  still pending (`stall_clr`). This matters mostly when RSP is written while
  many stack loads are eliminable.
- **AMT probes.** One probe is taken per cycle, with snoops ahead of stores. A
  hit parks up to four PCs in a small buffer, and the next probe waits
  (`st_ready` / `sn_ready`) until the buffer has drained.

## Rules that keep elimination safe

The basic scheme leaves some timing windows open. This RTL closes them as
follows.

- **A source written inside the rename group.** If an older uop of the same
  group writes a source of a load, that load is not eliminated. The RMT reset
  for that write may not be written into the SLD yet.
- **A source written while a likely-stable load is in flight.** The load is
  entered in the RMT only at writeback. If a younger uop renamed one of its
  sources in between, that RMT lookup found nothing to reset, and the load
  would become eliminable with an address that is no longer right.
  - To prevent this, the top keeps a 10-bit write counter per architectural
    register. A load's `ren_res.src_seq` carries the counters of its sources.
    The core returns them on `wb.src_seq`.
  - A mismatch at writeback means a source was written in between, so the load
    is not tracked (`track_refused`).
  - 2^10 exceeds the number of uops a 512-entry ROB can hold behind a load, so a
    counter cannot wrap back to the same value.
- **The line is probed while a likely-stable load is in flight.** A short
  history of probed lines catches this (see *Ordering against in-flight
  stores*).
- **A table is full.** Inserting into a full RMT list, a full AMT entry (four
  PCs) or a full AMT set is refused. `can_eliminate` is set only if both tables
  took the load. Nothing already tracked is ever displaced.
- **Reset and set in the same cycle.** If both hit the same SLD entry, the
  reset wins.
- **Probe and insert in the same cycle.** If they hit the same line, the insert
  is refused.
- **Line aliasing.** The AMT tag covers the 32 line-address bits above the set
  index. Higher bits alias, which can only cause extra resets.

## Ordering against in-flight stores

A store's address may be generated after a younger instance of a load was
already eliminated at rename. That instance carries the old value. The engine
does not repair this itself. The core's memory disambiguation does, because the
eliminated load keeps a load-buffer entry with its address (`ren_res.addr`). The
core compares a new store address against that entry and, on a match, flushes
and re-executes the load. The re-executed load then sees a value mismatch and
halves the confidence.

The end-to-end testbench contains a model of this check. Any eliminated value
that was wrong must be explained by such a flush.

One more window is closed inside the engine. Suppose a store's address is
generated, or a snoop arrives, after a likely-stable load read memory but
before its writeback put the line into the AMT. The probe finds no entry. The
top therefore keeps the last 16 probed lines, together with a running 16-bit
probe count:

- A likely-stable load takes the count with it (`ren_res.probe_seq`) and returns
  it at writeback (`wb.probe_seq`).
- If its line is among the probes taken since then, it is not tracked.
- If more than 16 probes have happened since then, it is not tracked either.

This is conservative: the load was renamed before it read memory. A count that
wraps (65,536 probes during one load's flight) is not detected.

There is also no repair of the tables after a branch misprediction. Wrong-path
uops may reset flags, which only loses elimination opportunities.

## Interface of the top (`constable`)

Types are in `rtl/constable_pkg.sv`.

| Group | Signals | Notes |
|---|---|---|
| Rename | `ren_group_valid`, `ren_uop[6]` (`ren_uop_t`: valid, is_load, pc, dst, 2 sources) → `ren_accept`, `ren_res[6]`, `stall_rd`, `stall_clr` | Hold the group until `ren_accept`. `ren_res[i].valid` marks the cycle in which load *i* got its answer (`eliminate`, `likely_stable`, `xprf_idx`, `addr`, `src_seq`, `probe_seq`). |
| xPRF | `xrd_idx[2]` → `xrd_val[2]`; `xfree_valid[3]`, `xfree_idx[3]`; `xfree_cnt` | Read ports for dependents. Frees come from the core when the move's mapping is released. |
| Writeback | `wb` (`wb_load_t`: pc, 48-bit address, value, likely_stable, sources, src_seq, probe_seq) → `track_refused` | One non-eliminated load per cycle. |
| Memory | `st_valid`, `st_addr` → `st_ready`; `sn_valid`, `sn_line` → `sn_ready`; `probe_hit` | Store address generation and incoming snoops. |
| Directory | `pin_valid`, `pin_line` | Pin this core's presence bit for the line. |
| Global | `clk`, `rst_n` (async, active low), `flush_all` | |

**Timing.** All decisions are combinational in the cycle they are asked:

- SLD lookup, elimination, xPRF grant and `ren_res`.
- The writeback's `tr_match`, RMT/AMT acceptance and `pin_valid`.
- AMT probe hit.

State changes at the next rising edge. A store or snoop hit resets its loads
within the next one or two cycles.

## Files

| File | Contents |
|---|---|
| `rtl/constable_pkg.sv` | Sizes, uop and result structs, PC hash, line address |
| `rtl/sld.sv` | Stable load detector: 3 lookup ports, 1 training port, 2 reset ports, flush |
| `rtl/rmt.sv` | Register monitor table with pending-reset slots |
| `rtl/amt.sv` | Address monitor table with a 4-entry reset buffer |
| `rtl/xprf.sv` | 32-entry extra register file with free bitmap (an assertion checks frees) |
| `rtl/clear_arbiter.sv` | Chooses up to two SLD resets per cycle |
| `rtl/constable.sv` | Top: rename scheduling, elimination, training, probes, write counters, probe history |
| `tb/*_tb.sv` | One self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself after a
fixed number of cycles if it hangs. The leaf testbenches compare the module
with an independent model under random stimulus. They also run directed cases,
including the worked example of a load reaching confidence 30, arming at 31 and
falling to 15 on a mismatch.

```
verilator --binary --timing --assert -Irtl rtl/constable_pkg.sv rtl/sld.sv tb/sld_tb.sv --top-module sld_tb
./obj_dir/Vsld_tb
```

The other leaf testbenches run the same way: `rmt_tb`, `amt_tb`, `xprf_tb` and
`clear_arbiter_tb`. For the whole engine:

```
verilator --binary --timing --assert -Irtl rtl/constable_pkg.sv rtl/sld.sv rtl/rmt.sv rtl/amt.sv \
    rtl/xprf.sv rtl/clear_arbiter.sv rtl/constable.sv tb/constable_tb.sv --top-module constable_tb
./obj_dir/Vconstable_tb
```

`tb/constable_tb.sv` runs the top at its full default size. A behavioural core
runs a synthetic program on it:

- 24 static loads: PC-relative, stack-relative, and register-relative with one
  or two sources.
- ALU writes, silent and non-silent stores, snoops from another core,
  address-mapping flushes, and phases that exhaust the xPRF.
- Store addresses reach the engine up to two groups late. In half of the
  groups, stores and snoops come before the group's writebacks.
- A directory model keeps this core's presence bit for each line. Random clean
  evictions drop the bit unless the line is pinned. Another core's write
  produces a snoop only while the bit is set. A missing or misdirected pin
  therefore shows up as a stale elimination.

It holds architectural registers and memory, so it knows the correct address
and value of every load:

- Every eliminated load's address and xPRF value is checked against them.
- A wrong value must be explained by the load-buffer model.

It counts each mechanism and fails if any never happened:

- eliminations, likely-stable marks and directory pins (every pin is checked
  against the writeback's line)
- clean evictions of pinned lines, and writes by another core that produced no
  snoop
- both kinds of rename stall
- RMT and AMT resets, store hits and snoop hits
- xPRF exhaustion
- in-group dependences
- refused writebacks, and writebacks whose source was renamed or whose line
  was probed in flight
- disambiguation flushes and mapping flushes

A run is about 65,000 cycles and takes under a second. `+verilator+seed+N`
changes the random program.

## What follows the published design, and what does not

The following follow the published design of Constable, including all its
sizes:

- the three tables and their entry formats, and the 32-entry xPRF
- the training rule (+1 or halve, threshold 30)
- the rename-time elimination and writeback-time arming
- resets on register rename, store address generation and snoops, with
  eviction of the probed AMT entry
- three SLD reads and two SLD resets per cycle, with rename stalls beyond that
- the fallback to normal execution when the xPRF is full
- pinning of the presence bit
- the full reset on address-mapping changes
- no repair on mispredictions

Everything listed below is this implementation's own. That includes the three
safety rules above that go beyond the published flow: the in-group dependence
rule, the write counters and the probe history.

## Choices made where the design leaves freedom

- **PC hash.** XOR fold to 24 bits.
- **SLD replacement.** The first invalid way, else per-set round robin.
- **Line size.** 64-byte lines.
- **Register encoding.** x86-64 numbering, with RSP = 4 and RBP = 5.
- **Lookup stage.** The SLD is read in the rename cycle. Reading it one
  stage earlier, at decode, would also fit the scheme.
- **Likely-stable threshold.** Confidence ≥ 30. A confidence equal to the
  threshold is enough.
- **Mismatch.** A mismatch also clears `can_eliminate`.
- **Full tables.** Refused, not replaced.
- **Port counts and handshakes.**
  - One writeback per cycle and one AMT probe per cycle.
  - Three xPRF allocation ports, two read ports and three free ports.
  - The group-hold and ready handshakes.
- **Safety additions.** The in-group dependence rule, the write counters and
  the probe history (see *Rules that keep elimination safe*).
- **Not modelled.** Two SMT threads sharing the engine. No entry carries a
  thread identifier.
