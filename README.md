# NAPOLY+: a scored NFA array for sequence alignment

An automata processor built from an array of state transition elements (STEs)
can follow every path of a nondeterministic finite automaton at once, one input
symbol per clock. It can tell *that* a pattern matched. It cannot tell which
of several matching paths was the best one. In sequence alignment that is the
question that matters: with match, mismatch and gap scores, an alignment is
only as good as its accumulated score.

NAPOLY+ extends the NAPOLY overlay with that missing piece. Each element
(STE+) keeps its NFA behaviour: a symbol class, a state bit and programmable
links to its neighbours. It also gains an edge-score register, an adder and a
local score register. While the states advance, every active STE+ carries the
score of the best path that reached it. When an accepting STE+ turns on, the
core reports which STE+ it was, where in the input it happened and with what
score. The core also keeps the highest-scoring report of the run, which is the
best alignment.

This directory holds a synthesizable SystemVerilog model of the NAPOLY+ core:
the STE+ array and its interconnect, the pattern, symbol and score/match
buffers, match reporting and the stage controller. Self-checking testbenches
come with it. External DRAM is not part of the core: its three streams are
ports.

## 1. The STE+

Each STE+ (`rtl/ste_plus.sv`) holds:

| part | size | role |
|---|---|---|
| symbol RAM | 256 x 1 | bit *s* is 1 if input symbol *s* belongs to the STE+'s class |
| state register | 1 | the STE+ is active |
| route bits | FANOUT | link *k* to a neighbour is enabled |
| accept bit | 1 | reports a match when active |
| start bit | 1 | a start STE+: always active, score 0 |
| start_link bit | 1 | the dedicated fan-in from the start is enabled |
| edge_score | 16, signed | score added on entering this STE+ |
| score register | 16, signed | best path score into this STE+ |

On every step, with input symbol *s*:

```
incoming   = active predecessors on enabled links (plus the start fan-in if start_link)
state'     = sym_ram[s] AND (incoming is not empty)
best_in    = max over incoming of their scores   (the start fan-in counts as score 0)
score'     = saturate16(best_in + edge_score)    if state' else 0
active     = state OR start
out_act[k] = active AND route[k]
out_score  = 0 if start else score
accept     = state AND accept_bit
```

Three of these rules are the core of the design.

* **Maximum on fan-in.** Several predecessors can be active at once. This
  happens constantly, because the start is always active and new paths open
  on every symbol. The STE+ keeps the best of them. This is the max-plus
  (Viterbi) recurrence, computed in parallel for every state in one clock.
* **Start fan-in at score 0.** Every STE+ may take a dedicated input from the
  start. That input is always active and carries score 0, so a new
  alignment can begin at any symbol. Accepting STE+ usually leave it off.
  A match ends a path; it should not begin one.
* **Scores ride with states.** The score register changes on the same step as
  the state bit. A successor always sees the score that belongs to the
  predecessor's current activation.

### A worked example

The four-state DNA automaton used as the running example has start state 1.
On A it goes to 2, on C to 3. State 2 loops on G and goes on C to the
accepting state 4. State 3 loops on T and goes on G to state 4. The
mismatches [^CG] from state 2 and [^TG] from state 3 return to state 1.

In the array it becomes one STE+ per labelled transition, with labels on
states (ANML form):

| STE+ | class | predecessors | edge score | notes |
|---|---|---|---|---|
| 0 | - | - | 0 | start bit |
| 1 | A | 0 | +2 | |
| 2 | G | 1, 2 | +2 | self loop |
| 3 | C | 1, 2 | +2 | accept (state 4) |
| 4 | C | 0 | +2 | |
| 5 | T | 4, 5 | +2 | self loop |
| 6 | G | 4, 5 | +2 | accept (state 4) |
| 7 | [^CG] | 1, 2 | -1 | back to the start |
| 8 | [^TG] | 4, 5 | -1 | back to the start |

The scores are +2 for a match and -1 for a mismatch. Input `AGC` gives:
STE+ 1 at +2 after A; STE+ 2 at +4 after G; after C, STE+ 3 accepts at +6
while STE+ 4 is active at +2. The core emits the record
`{ste_id 3, offset 2, score 6}`. The end-to-end testbench checks exactly this
sequence, then a longer random one.

## 2. The array and its links

`rtl/ste_array.sv` places `NUM_STE` STE+ on a one-dimensional numbering.
Link *k* (0 .. FANOUT-1) of STE+ *m* goes to STE+

```
t = m - floor((FANOUT-1)/2) + k
```

So an STE+ reaches itself and its neighbours from *n - floor((f-1)/2)* to
*n + floor(f/2)*. With FANOUT = 16 that is n-7 .. n+8. A link carries the
activation bit (already AND-ed with the route bit) and the source's score.
Links that would leave the array are not connected. An automaton must
therefore be placed so that every edge spans at most this window. Placement
is the job of the software that builds the configuration.

The input symbol, `step` and `clear` go to every STE+ on global wires. The
start fan-in needs no wire: it is always active, so it is internal to each
STE+ and enabled by its `start_link` bit.

## 3. Loading a pattern set

The pattern set is a stream of 26-bit pattern words (`napoly_pkg::pat_word_t`)
that goes through `rtl/pattern_buffer.sv`:

* `PW_SYMBOL {ste_id, symbol, bit}` writes one bit of one STE+'s symbol RAM.
  An STE+ that is used needs all 256 bits written.
* `PW_CONFIG {bit}` shifts one bit into the configuration chain.

The chain runs from the pattern buffer into STE+ 0, then STE+ 1, and so on to
the last STE+, whose output is the `cfg_out` port (for read-back). Each STE+
holds `CFG_W = 2 + FANOUT + 1 + 16` bits (35 with FANOUT = 16). Send the
highest-numbered STE+ first, and send each STE+'s bits in this order:

```
start, accept, route[FANOUT-1] ... route[0], start_link, edge_score[15] ... edge_score[0]
```

Loading the full chain takes `NUM_STE * CFG_W` words (35,840 for the default
array), one per clock. Unused STE+ are loaded with all zeros. They then never
turn on, whatever their symbol RAM holds.

## 4. Running, reporting and the stall

`rtl/napoly_ctrl.sv` has three states:

* **IDLE.** Waits for a command.
* **CONFIG** (`cmd_config`). Applies one pattern word per cycle. After the
  host pulses `end_of_data` and the pattern buffer has drained, it returns
  to IDLE.
* **RUN** (`cmd_run`). In the entry cycle, `clear` resets all states, scores,
  the offset counter and the best match. After that, one symbol from
  `rtl/symbol_buffer.sv` is consumed in every cycle that has a symbol,
  unless the reporter holds. After `end_of_data`, once the symbols are used
  up and no report is pending, `done` pulses and the controller returns to
  IDLE.

Matches are turned into records by `rtl/match_reporter.sv`. A step leaves the
new accept vector on the array's outputs. Records are sent directly from that
live vector, lowest STE id first, one per cycle: `{ste_id[16], offset[32],
score[16]}`. The offset is the position of the symbol in the stream, counting
from 0.

* **No stall with at most one record.** The array may step in the same cycle
  that the last record of a symbol is sent. With zero or one accepting STE+
  per symbol, the core consumes one symbol per clock.
* **Stall for extra records.** Each additional record after the same symbol
  holds the array for one cycle. A full output buffer also holds it.
* **Hold signals.** The `stall` port shows held cycles. The testbench checks
  that a preloaded run of L symbols takes L cycles plus one per extra record.

`rtl/score_match_buffer.sv` queues the records for DRAM. It also keeps
`best`: the first record with the highest score since the run began.

## 5. Parameters

| parameter | default | where the number comes from |
|---|---|---|
| `NUM_STE` | 1024 | the smallest array size evaluated (sizes of 1K to 64K are evaluated) |
| `FANOUT` | 16 | chosen; the evaluated maximum fan-out is plotted per array size without values |
| `SYM_BUF_DEPTH` | 65536 | the 64K x 8 input buffer of the original NAPOLY element |
| `PAT_BUF_DEPTH` | 1024 | chosen |
| `OUT_BUF_DEPTH` | 256 | chosen |
| `SYM_W` (package) | 8 | 256 x 1 symbol memory per element |
| `SCORE_W` (package) | 16 | chosen |

Larger arrays only need `NUM_STE`. Raise `STE_ID_W` in `napoly_pkg` if
`NUM_STE` goes beyond 65536. A wider `FANOUT` gives longer edges but costs
FANOUT comparators per STE+.

## 6. What follows the source design and what is this implementation's own

These parts follow the published NAPOLY/NAPOLY+ description:

* the STE logic (OR of predecessor activations, AND with the symbol lookup,
  start bit, AND-ed outgoing links);
* the link window;
* the per-element edge-score register, adder and local score register;
* the start element that is always active, the connection of every element
  to the start, and incoming scores reset to zero for each new symbol;
* accepting elements without a start connection;
* the three buffers and the report of ids, offsets and scores;
* the 256 x 1 symbol memory;
* the 64K x 8 input buffer.

These are choices made here, because the source gives no detail:

* the maximum over active predecessors (the source shows one "incoming
  score" and does not say how several are combined);
* 16-bit saturating scores;
* the placement of the score register after the adder;
* the order of the chain bits and how edge scores and `start_link` are
  loaded;
* the pattern-word format;
* the controller stages' commands and `end_of_data`;
* serialising simultaneous matches with a stall;
* the best-match register in the output buffer;
* the buffer depths other than the symbol buffer;
* synchronous active-low reset.

The configuration software must also respect two rules of the source
design that the hardware does not enforce. Accepting STE+ should have no
start connection. Every edge must fit the link window.

The figure of the element draws the adder's output directly as the outgoing
score, while the text speaks of a register holding each element's local
score. Here the register sits after the adder, so a score moves one element
per symbol, together with the state bit.

These parts are not modelled:

* the DRAM;
* the limit of about one million horizontal wires that bounds the array on
  the evaluated FPGAs;
* the physical two-dimensional layout and the split of links into global and
  local FPGA wires (the logic uses the one-dimensional numbering);
* the FPGA-specific resource figures.

## 7. Files

`rtl/`:

| file | content |
|---|---|
| `napoly_pkg.sv` | widths, `pat_word_t`, `match_rec_t`, controller states, saturating add |
| `napoly_fifo.sv` | generic show-ahead FIFO used by the three buffers |
| `ste_plus.sv` | one STE+ |
| `ste_array.sv` | the array and its links |
| `pattern_buffer.sv` | pattern FIFO and word decoder |
| `symbol_buffer.sv` | input FIFO and offset counter |
| `match_reporter.sv` | accept vector to records, hold |
| `score_match_buffer.sv` | output FIFO and best match |
| `napoly_ctrl.sv` | IDLE / CONFIG / RUN |
| `napoly_plus_top.sv` | the core |

`tb/`: one self-checking testbench per module, `tb_<module>.sv`. Two more are
end to end:

* `tb_napoly_plus_top.sv` uses 64 STE+ and small buffers, so that stalls and
  a full output buffer both occur.
* `tb_napoly_plus_full.sv` uses all default parameters.

Both drive the core through `napoly_tb_host.sv`. It holds the example
automaton, a reference model and the event counters. Every testbench prints
`TB_RESULT checks=N failures=M`.

## 8. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_napoly_plus_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/napoly_pkg.sv tb/tb_napoly_plus_top.sv
./obj_dir/Vtb_napoly_plus_top
```

Replace the top module to run another testbench. The full-size test
(`tb_napoly_plus_full`) takes about a minute and a half to build and about
20 seconds to run. The testbenches initialise everything they read, so they
do not depend on X handling.

## 9. How far it has been checked

* **Unit tests.** Each block's testbench compares it with a model written
  separately in the testbench. The STE+ and array tests use random
  configurations, symbols and scores, including saturation in both
  directions.
* **End-to-end tests.** These reproduce the DNA example and then run random
  streams through two configurations. They cover:
  * reconfiguration between runs;
  * the start fan-in and the start STE+;
  * stalls from multiple matches;
  * back-pressure from a full output buffer;
  * score saturation.
  Each of these is counted and must occur.
* **Fault tests.** Each testbench was also run against a deliberately broken
  copy of its module, and it failed.
* **Not verified.** Timing closure and resource use on an FPGA have not been
  checked. A second example score (-1 for `AGATG`) is not reproduced, because
  the path behind it is not given.
