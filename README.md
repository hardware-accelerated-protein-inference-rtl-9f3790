# A bit-split Aho-Corasick peptide matcher for protein inference

Bottom-up protein inference works backwards from peptides: a protein sample is
digested into short peptides, the peptides are identified, and the proteins are
inferred from which peptides were seen. The step this hardware speeds up is the
search in the middle: given an amino-acid sequence, find which of a few hundred
known peptides occur in it. Each known peptide belongs to a protein reference
cluster (a representative sequence standing for a family of homologous
proteins). Software on the host processor then turns the set of peptides found
into a score per cluster and picks the cluster with the highest total.

The matcher holds every peptide at once and reads the input sequence one letter
per clock cycle, whatever the number of peptides. It does this with the
*bit-split* form of the Aho-Corasick multi-pattern automaton: instead of one
large state machine over a 20-letter alphabet, each group of peptides is
followed by five small state machines, each of which sees only one bit of every
letter. The peptides are grouped into 20 *tiles* of up to 20 peptides each.
A tile is five bit-split machines; all tiles read the same letter in parallel.

The accelerator is a memory-mapped peripheral. The host loads the automaton
tables, writes the letters of a sequence, and reads back one word per tile whose
bits mark the peptides found.

```
 host CPU (bus master) ── bus interconnect ── pi_accel_top
                                               ├─ pi_avalon_slave   register file, bus protocol
                                               └─ pi_task_logic     letter coding, result flags
                                                   └─ pi_tile x20   five FSMs + AND
                                                       └─ bitsplit_fsm x5
```

The host processor, the interconnect, the software that builds the tables from a
peptide list, and the scoring software are not part of this RTL.

## Bit-split matching

### Letters as five bits

A letter is reduced to a 5-bit code, `code = letter - 'A'` (A=0, C=2, ..., Y=24;
lower case is folded to upper case). Five bits cover the 20 standard amino acids
and also B, J, O, U, X, Z. FSM *k* of a tile (k = 0..4) follows bit *k* of the
code.

### What one FSM computes

Take the peptides of one tile and replace every letter by its bit *k*. Each
peptide becomes a binary string; FSM *k* is an ordinary Aho-Corasick automaton
over those binary strings, completed into a deterministic machine: every state
has exactly two successors, `next0` and `next1`. Each state also carries a
*partial match vector* (PMV) of 20 bits. Bit *i* of a state's PMV is set when
the binary projection of peptide *i* is a suffix of the bit string that leads
to that state. Put another way: after the input letters x1..xt, bit *i* of FSM
*k*'s PMV says "the last len(i) letters agree with peptide *i* in bit *k*".

### Why ANDing five PMVs gives exact matches

Two letters are equal exactly when all five of their code bits are equal. So
peptide *i* ends at letter *t* exactly when all five FSMs report bit *i* at
once. The tile's output is therefore the bitwise AND of the five PMVs, a
20-bit vector of the peptides that end at the current letter. No false
positives or misses are possible; a single FSM on its own would report many
false matches, since a binary projection is much less selective than the
letters themselves.

Example: peptide `KR`, K = 10 = `01010b`, R = 17 = `10001b`. FSM0 follows the
bit-0 projection `0 1`, FSM1 `1 0`, FSM2 `0 0`, FSM3 `1 0`, FSM4 `0 1`. On the
input `...KR` each FSM reaches a state whose PMV contains `KR`, and the AND
reports it at R. On `...KQ` (Q = 16 = `10000b`) FSM0 sees `0 0` and drops the
bit, so the AND does not report `KR` even though four of the five FSMs do.

### Why bit-split is small

An Aho-Corasick automaton over 20 letters needs up to 20 successors per state.
A bit-split machine needs 2, at the price of five machines instead of one. The
binary tries also share prefixes much more than the letter trie does: twenty
random peptides of 6 to 25 letters give at most about 270 states per FSM in
the full-size test, against the worst case of one state per letter plus the
root.

### Building the tables

The tables are computed off-line from the peptide list, one FSM at a time:

1. Project every peptide onto bit *k*.
2. Insert the binary strings into a trie (`goto[state][bit]`), root = state 0.
   The state where peptide *i* ends gets PMV bit *i*.
3. Walk the trie breadth first. For a child `u = goto[r][b]`, its failure state
   is `fail[u] = goto[fail[r]][b]` and `PMV[u] |= PMV[fail[u]]`. For a missing
   edge, `goto[r][b] = goto[fail[r]][b]`; at the root a missing edge loops to
   the root.
4. Write `next0 = goto[s][0]`, `next1 = goto[s][1]` and `PMV[s]` for every state.

The testbench package `ac_build_pkg` implements exactly this and can serve as a
reference for host software.

### Capacity

Each FSM has `STATES = 512` entries. A trie never needs more states than the
total number of letters in its peptides plus one, so any 20 peptides of up to
25 letters fit (20 x 25 + 1 = 501). Longer peptides fit as long as the
projected tries stay within 512 states, which the builder can check.

## Tiles and clusters

Each tile holds the peptides of one protein reference cluster, or part of one:
a cluster with more than 20 peptides is spread over several tiles. The
reference configuration maps 13 clusters and 319 peptides onto the 20 tiles:

| Tile | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 | 16 | 17 | 18 | 19 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| Cluster | 1 | 1 | 2 | 3 | 3 | 4 | 5 | 6 | 7 | 7 | 7 | 8 | 8 | 8 | 9 | 10 | 11 | 12 | 13 | 13 |
| Peptides | 13 | 14 | 9 | 20 | 19 | 18 | 12 | 18 | 20 | 20 | 18 | 20 | 20 | 19 | 11 | 14 | 5 | 17 | 16 | 16 |

The hardware does not know about clusters: it reports peptides per tile, and the
host keeps the map from tile and bit to cluster and peptide. The PMV bits of
unused peptide slots are simply never set.

## Result flags and timing inside the matcher

`pi_task_logic` is a two-stage pipeline.

* Cycle *n*: a letter is presented (`ch_valid`). All 100 FSMs take their next
  state at the clock edge ending the cycle.
* Cycle *n+1*: each tile's AND of PMVs, read combinationally from the new
  states, is ORed into that tile's 20 result flags at the next edge. `busy` is
  high during this cycle.

A new letter can be presented in cycle *n+1*, so the throughput is one letter
per clock, and the flags contain every letter's matches two edges after the
letter. The result flags are *sticky*: a flag, once set, stays set until
`clear`. They say which peptides were seen, not how often. A 32-bit counter
counts letters since the last clear.

`clear` resets the FSM states, the flags and the counter. `restart` resets only
the FSM states. It separates two sequences fed one after the other (for example
the entries of a comma-separated list) so that no peptide is matched across the
boundary, while the flags collect what both sequences contain. A clear or
restart in the same cycle as a letter wins and the letter is dropped.

## Host interface

`pi_avalon_slave` is an Avalon-MM slave with the basic signal set:
`chipselect`, `address` (6-bit word address), `read`, `write`,
`writedata`/`readdata` (32 bits) and `waitrequest`. Reads have zero latency:
`readdata` is valid in the cycle the transfer completes, which is the first
cycle where `waitrequest` is low.

| Word | Name | Access | Meaning |
|---|---|---|---|
| 0 | CTRL | W | bit 0: clear (states, flags, counter); bit 1: restart (states) |
| 0 | CTRL | R | bit 0: busy |
| 1 | DATA | W | one ASCII letter in bits 7:0 |
| 2 | TBL_ADDR | R/W | state in bits 8:0, FSM (0-4) in bits 11:9, tile (0-19) in bits 16:12 |
| 3 | TBL_NEXT | W | next-on-0 in bits 8:0, next-on-1 in bits 24:16, written at TBL_ADDR |
| 4 | TBL_PMV | W | PMV in bits 19:0 written at TBL_ADDR, then the state field of TBL_ADDR increments |
| 5 | COUNT | R | letters since the last clear |
| 6 | CONFIG | R | STATES in bits 31:16, peptides per tile in bits 15:8, tiles in bits 7:0 |
| 16+t | RESULT t | R | flags of tile t, bit i = peptide i seen |

The field positions above are for the default sizes. In general the state field
is `clog2(STATES)` bits wide at bit 0, the FSM field 3 bits above it, the tile
field above that.

**Waitrequest rule.** While a letter is still being folded into the flags
(`busy`), the slave holds `waitrequest` high for every read and for every CTRL
write. Letter writes and table writes never wait. A host can therefore write
letters back to back, one per clock, and its next read (status, result or count)
waits one cycle and then sees every letter written before it. A clear or restart
after the last letter is likewise delayed until that letter has been counted.

**Typical use.**

1. For every tile *t* and FSM *k*: write TBL_ADDR = {t, k, 0}, then TBL_NEXT and
   TBL_PMV for state 0, 1, 2, ... (the address advances by itself after each PMV).
2. For each protein: write CTRL = 1, write its letters to DATA, read RESULT 0..19.
3. In software, score each cluster from the flags and report the best one.

After reset the FSM states, flags, counter and table address are 0, but the
table contents are not defined: load the tables and write CTRL = 1 before the
first sequence.

## Modules

| File | Role |
|---|---|
| `rtl/pi_pkg.sv` | sizes, register map, the letter-to-code function |
| `rtl/bitsplit_fsm.sv` | one bit-split FSM: two successor tables, PMV table, state register |
| `rtl/pi_tile.sv` | five FSMs on the five code bits, AND of their PMVs |
| `rtl/pi_task_logic.sv` | 20 tiles on one letter stream, result flags, counter, busy |
| `rtl/pi_avalon_slave.sv` | bus slave, register decode, table address, waitrequest |
| `rtl/pi_accel_top.sv` | slave plus task logic, the component's bus port |

Parameters of the top (and of the modules below it): `N_TILES` = 20, `NPEP`
(peptides per tile) = 20, `STATES` = 512. The number of FSMs per tile is fixed
at 5 by the letter code. With the defaults the design holds 100 FSMs and
1,945,600 bits of table (100 x 512 x (9 + 9 + 20)), about 1,350 flip-flops
and a 20-way result multiplexer. The tables are written as plain arrays with
one write port and a combinational read. An FPGA flow will build them from
distributed memory or logic, since the next state must be read in the same
cycle. A version with block RAM would need the state register moved into the
RAM's output register.

## Verification

Each module has a self-checking testbench in `tb/` that compares against an
independent reference (direct string search or bit-string comparison, never the
RTL's own tables):

| Testbench | What it checks |
|---|---|
| `tb_bitsplit_fsm` | one FSM per code bit, PMV after every letter against projected string ends; hold and restart |
| `tb_pi_tile` | per-letter match vector of a 20-peptide tile, including peptides that overlap or contain each other |
| `tb_pi_task_logic` | three tiles: sticky flags per sequence, counter, busy timing, clear, restart splitting a peptide |
| `tb_pi_avalon_slave` | every register, strobe and field, auto-increment, waitrequest for reads and CTRL writes while busy |
| `tb_pi_accel_top` | end to end through the bus at 4 tiles: table loading, several proteins, lower case, restart between two proteins, one letter per clock, one-cycle stall before the result read; fails if any of these never happened |
| `tb_pi_accel_full` | default sizes, the 13-cluster / 319-peptide mapping above with random peptides of 6-25 letters; every result word, the counter, one letter per clock, and that the best-scoring cluster is the one the protein came from |

Helpers: `ac_build_pkg` (table builder and string-search reference) and
`avalon_master_bfm` (bus master tasks). Every testbench prints
`TB_RESULT checks=N failures=M`, and has a watchdog.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pi_pkg.sv tb/ac_build_pkg.sv rtl/*.sv tb/avalon_master_bfm.sv \
  tb/tb_pi_accel_full.sv --top-module tb_pi_accel_full -o sim
./obj_dir/sim
```

The full-size run loads about 38,000 table words and streams about 5,000
letters. It takes well under a second of simulation.

The peptide sequences are random: the real peptide lists behind the reference
mapping are not available, so the tests check the mechanism, not biological
results.

## Where this design departs from the original prototype, and what is its own

Taken from the prototype: bit-split Aho-Corasick matching; 20 tiles of at most
20 peptides each, 5 FSMs per tile (100 FSMs); all tiles matching the same input
in parallel; the outputs of a tile's FSMs combined into one tile output; an
Avalon-MM slave with the signals listed above in front of the matching logic,
with a register file between them; a host that writes the input, reads results
and does the probability arithmetic; the 13-cluster mapping.

Choices made here, where the prototype's description stops:

* **Programmable tables.** The prototype compiled its peptide set directly into
  FPGA logic. Here the automaton lives in writable tables, so any peptide set
  within the capacity can be loaded without rebuilding the hardware. This costs
  memory, 512 states per FSM whether used or not.
* **Letter code and bit assignment.** 5-bit `letter - 'A'`, FSM *k* on bit *k*.
  Five FSMs per tile imply one bit each; the exact code is an assumption.
* **Combining by AND.** The tile output is the AND of the five partial match
  vectors, which the bit-split algorithm requires.
* **Result format.** One sticky seen/not-seen flag per peptide, plus a letter
  counter. The prototype's result word format is unknown; occurrence counts are
  not kept.
* **Register map, one letter per bus write, the waitrequest rule, restart,
  table depth of 512, 32-bit data bus, synchronous active-low reset.**
* One sentence of the original description says that each tile is a single
  state machine; everywhere else, including the count of 5 x 20 machines,
  a tile has five. This design follows the five-machine reading.

Not built: the host processor, the bus interconnect, the table builder as
host software, and the scoring and inference software. The scoring used in
`tb_pi_accel_full` (fraction of a cluster's peptides found) is only a
stand-in for the host's probability computation.
