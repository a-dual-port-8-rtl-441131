# Dual-port CAM pattern-matching engine for network intrusion detection

This is synthesizable SystemVerilog for a deep-packet-inspection engine. The
engine looks for every occurrence of a library of byte patterns (intrusion
signatures) anywhere in two incoming byte streams, at one byte per stream per
clock. It follows the architecture of the paper "A Dual-Port 8-T CAM-Based
Network Intrusion Detection Engine for IoT" (D. Li and K. Yang). The RTL is an
independent reconstruction: the paper describes the architecture and the
circuits, and where it stops, this code makes its own choices. Those choices
are marked below and in each file's header comment.

The main idea is to split matching by how often each part is needed:

* **Phase-1** matches only the first *K* bytes of each pattern (the prefix).
  Every input byte goes through it, so it is built to be cheap. It runs an
  Aho-Corasick automaton that is cut into pipeline stages by depth, and it
  searches small content-addressable memories (CAMs) in which only the rows
  that can possibly match are switched on.
* **Phase-2** runs only after a prefix has matched. It compares the remaining
  bytes (up to 20) in one wide wildcard CAM lookup and reports the pattern ID.
* **Phase-3** (multi-pattern rules and patterns longer than Phase-2 can hold)
  is host software in the paper. It is not part of this RTL: the engine
  delivers hit records to a FIFO for it.

## Contents

1. [Phase-1: an Aho-Corasick automaton without failure transitions](#phase-1-an-aho-corasick-automaton-without-failure-transitions)
2. [Next ranges: how the tables encode the trie](#next-ranges-how-the-tables-encode-the-trie)
3. [The fixed-1s code and the dual-port CAM cell](#the-fixed-1s-code-and-the-dual-port-cam-cell)
4. [The range decoder](#the-range-decoder)
5. [Phase-2, the arbiter and clock gating](#phase-2-the-arbiter-and-clock-gating)
6. [Timing of one match](#timing-of-one-match)
7. [Programming the engine](#programming-the-engine)
8. [Top-level interface](#top-level-interface)
9. [Sizes and what fits](#sizes-and-what-fits)
10. [Prefix depth against traffic: the sweep testbench](#prefix-depth-against-traffic-the-sweep-testbench)
11. [Where this RTL departs from or goes beyond the paper](#where-this-rtl-departs-from-or-goes-beyond-the-paper)
12. [Files](#files)
13. [Simulating](#simulating)

## Phase-1: an Aho-Corasick automaton without failure transitions

A textbook Aho-Corasick (AC) automaton is a trie of the patterns, which
follows one state per input byte. When the next byte has no child in the trie,
a *failure* (backward) transition jumps to the longest suffix of the text read
so far that is also a trie prefix. A CAM-based AC stores every transition as
{current state, byte} → next state. Backward transitions outnumber forward ones
by far: the paper quotes 430K against 7.6K for a ClamAV ruleset. So the table
mostly holds failure edges.

The pipelined form stores no failure edges at all. The trie is cut by depth.
Depth 1 is handled by the **Stage-1 table**. Each deeper level *d* (2..K) is
handled by a *stage*, a group of Phase-1 **processing elements (PEs)**. In
every cycle, every stage takes the same input byte. A prefix match can begin
at any byte, so a new match attempt starts at depth 1 on every byte. The
attempt that began *d−1* bytes ago is at depth *d*, and so on. Each stage
therefore tracks one match attempt per port, and the attempts move one stage
per cycle. An attempt that fails simply vanishes. The shorter attempt that a
failure transition would have jumped to is already running in a shallower
stage. The price is that several small CAM searches happen per byte instead of
one. What that buys is tables that hold only forward transitions.

The configuration used in the testbench's main run has K = 4. Stage-1 covers
depth 1, PEs 0–1 depth 2, PEs 2–4 depth 3, and PEs 5–7 depth 4. The hardware
has no notion of stages: a stage is just the set of PEs that the tables send
ranges to. Rewriting the tables changes the prefix depth and the number of PEs
per stage. The paper uses this to trade Phase-1 energy against Phase-2
activity as the share of malicious traffic changes.

## Next ranges: how the tables encode the trie

A PE holds the transitions *into* some states of its depth:

| memory | per row | meaning |
|---|---|---|
| match table: 64 × 11-bit dual-port CAM (`cam8t_array`) | the byte of the transition, fixed-1s coded | "this child is reached on byte c" |
| transition table: 64-entry SRAM with two read ports (`dp_sram`) | a *next range* `{valid, PE ID, UP, DN}` | where the children of that child live |

The current state is never stored or compared. All children of one state sit
in consecutive rows DN..UP of one PE. The next range that brought us to the
state names exactly those rows. A search therefore:

1. gets a range from the router: this PE, rows DN..UP;
2. enables only those rows (`range_decoder`) and searches the byte on the
   port's search lines;
3. registers the transition-table entry of the matching row. That entry is the
   range for the next byte, in the next stage.

At most one row matches, because siblings have different bytes. The RTL picks
the lowest matching row anyway.

The PE ID is global (`nids_pkg`). IDs 0–7 are PEs and IDs 8–11 are Phase-2
banks 0–3. The **global router** (`global_router`) collects the registered
next ranges of Stage-1 and of all eight PEs, for each port. It hands each
range to the PE that the range names. A range that names a Phase-2 bank means
that the whole prefix has matched: its UP/DN then select the Phase-2 rows of
the patterns that share that prefix.

Example with patterns `he`, `hers` and `she`, and K = 3. Stage-1 entry `h`
points to PE0, rows 0..0, which holds `e`. Stage-1 entry `s` points to PE0,
rows 1..1, which holds `h`. PE0 row 0 (`he`) points to PE2, which holds `r`.
PE0 row 1 (`sh`) points to PE2, which holds `e`. PE2 rows (`her`, `she`)
point to Phase-2 rows. For the input `shers`, the depth-1 attempts on `s`, `h`
and `e` run side by side. On the `e` after `sh`, depth 3 sees `she`. On the
same cycle, the attempt that began at `h` is at depth 2 with `he`.

A Stage-1 entry is indexed directly by the byte: from the root no state needs
comparing, so this stage is a 256-entry SRAM with two read ports instead of a
CAM.

## The fixed-1s code and the dual-port CAM cell

Each character is stored and searched as an 11-bit word with exactly five
ones (`fixed1s_encoder`; there are C(11,5) = 462 such words). Byte *n* maps to
the *n*-th such word in increasing numeric order. For example, NUL =
`00000011111`, SOH = `00000101111`, `'A'` = `00100110011`, `'B'` =
`00100110101`. The package function computes the word by unranking *n* in the
combinatorial number system: from bit 10 down, set bit *b* when *n* ≥ C(*b*,
ones still to place), then subtract.

All words have the same weight. So a stored word S and a search word Q that
differ must have a position where S = 1 and Q = 0. A cell therefore needs
only one search transistor per port: it discharges the precharged match line
when it stores 1 and its search line is 0. The 8-T cell (`cam8t_cell`) has one
such transistor on each storage node:

* port A: gate on D, source on SLA = search word → pulls MLA low when D=1, SLA=0;
* port B: gate on DB, source on SLB = inverted search word → pulls MLB low when D=0, SLB=0.

Each port detects a mismatch on its own, so two different bytes (one per
stream) are searched in the same rows in the same cycle.

A stored all-zero word never pulls port A's line low, so it matches every
byte. That is the Phase-2 don't-care character. It does not work on port B,
which is why Phase-2 uses only port A. In silicon its cells drop the port-B
transistor and become 7-T cells.

The transistor-level parts are not modelled: precharge, sense amplifiers,
the reference voltage, and the power gating of disabled rows to a retention
voltage. A row that is not enabled simply reports no match.

## The range decoder

`range_decoder` turns {UP, DN} into row enables EN[i] = 1 for DN ≤ i ≤ UP
over 64 rows. The paper builds it from a chain of switches. To keep the chain
short, it has two levels:

* **Level 1** works on 8-row groups. One-hot decodes of UP[5:3] and DN[5:3]
  drive a top-down chain L1[g] = ¬L1_DN[g] ∧ (L1_UP[g] ∨ L1[g+1]). L1[g] is
  therefore set for the groups from UP's group down to, but not including,
  DN's group.
* **Level 2** works on rows. One-hot decodes of UP and DN drive a chain
  inside each group: EN[i] = L2_UP[i] ∨ (EN[i+1] ∧ ¬L2_DN[i+1]). The chain
  includes the DN row. The carry into the top row of group g is not EN of the
  row above but L1[g+1], the *look-ahead*. So no enable travels through more
  than eight switches, however wide the range.

This reproduces the paper's worked example UP = 57, DN = 55: L1[7] = 1,
L1[6] = L1[5] = 0, EN[57:55] = 1, EN[58] = EN[63] = 0. The testbench checks
all 2,080 ranges with DN ≤ UP. A range with DN above UP is not meaningful and
the tables never hold one.

## Phase-2, the arbiter and clock gating

**Bank** (`phase2_cam_bank`). Each bank is a 64 × 220-bit CAM: 20 characters
of 11 bits per row. Each row holds the bytes that follow one pattern's
prefix. Unused trailing positions and wildcard bytes are stored as all-zero
don't-cares. A 64-entry associate SRAM holds {pattern ID (8 bits), remaining
length (5 bits)}. A search takes two cycles. In the first, the range is
decoded and the key latched. In the second, the enabled rows are evaluated,
the lowest matching row is chosen and its SRAM entry is read. If patterns that
share a prefix could both match, the table order decides which is reported.

**Where the 20 bytes come from** (`stream_window`). The bytes after a prefix
have not arrived yet when the prefix matches. So each port's stream first
passes through a 20-byte window. Phase-1 searches the byte at the head,
`win[0]`. When a prefix that ended on the previous byte is reported, `win[0..19]`
holds exactly the 20 bytes that follow it. The request to Phase-2 carries a
snapshot of the window and the stream offset of `win[0]`. As a consequence,
Phase-1 runs 20 bytes behind the input. A stream's last 20 bytes are searched
only after 20 more bytes (padding, for example) have been pushed behind them.

**Arbiter** (`phase2_arbiter`). Phase-1 can report a prefix on each port in
every cycle, but Phase-2 accepts one search every two cycles. The paper names
two congestion cases, both flagged by the RTL:

* two matches in consecutive cycles (`back_to_back`);
* matches on both ports in the same cycle (`same_cycle`).

Each port has a two-entry queue. Port A is always served first. A request
that finds its queue full is dropped and flagged (`overflow`). The queue depth
and the drop policy are this design's choices.

**Controller** (`phase2_controller`). It encodes the 20 window bytes, starts
the named bank, and is ready again in the cycle the result returns. So
back-to-back requests are served every two cycles. A hit produces a record
{port, pattern ID, offset of the first byte after the prefix}, which goes
into the 16-entry output FIFO (`hit_fifo`). It also produces a *skip* request.

**Clock gating** (`global_controller`). Once a pattern is found, searching its
own suffix bytes again only spends energy. The paper therefore clock-gates the
engine over the rest of the matched pattern, using the length stored in the
associate SRAM. Here this is an enable: the port's Stage-1 and PE searches are
switched off until the stream has passed offset + length. Bytes already
searched while Phase-2 was working are subtracted. The `cg_en` input turns the
feature off. The paper's measurements compare the two settings. The gating
acts only on the port that matched. Matches that would start inside a gated
suffix are not found; that is the price of the saving.

## Timing of one match

For one port and K = 4, let bytes b0..b3 be a prefix and let byte b_i reach
the head of the window at clock edge t+i:

| edge | Stage-1 | depth-2 PE | depth-3 PE | depth-4 PE | Phase-2 |
|---|---|---|---|---|---|
| t   | looks up b0 | | | | |
| t+1 | | searches b1 | | | |
| t+2 | | | searches b2 | | |
| t+3 | | | | searches b3 → range names a bank | |
| t+4 | | | | | request queued with window b4..b23 |
| t+5.. | | | | | granted, 2-cycle search, hit record pushed |

Without congestion, a hit reaches the FIFO 4 cycles after the prefix's last
byte is searched (queue, start, two search cycles). The top-level testbench
checks this, and it reports up to about 24 cycles when both ports and the
queues are busy. The paper quotes a latency of 41.7 ns, 6 cycles at 144 MHz.
Its exact definition of input and output is not given, so the two numbers are
not directly comparable. On top of that, the search runs 20 bytes behind the
input because of the window. At one byte per port per cycle, the
throughput is two bytes per clock.

## Programming the engine

All tables are written through one configuration port: `cfg_we`,
`cfg_target`, `cfg_cam`, `cfg_addr` and a right-aligned `cfg_wdata`.

| cfg_target | cfg_cam | entry | cfg_wdata |
|---|---|---|---|
| 0–7 (PE) | 1 | CAM row 0–63 | 11-bit fixed-1s code of the transition byte |
| 0–7 (PE) | 0 | transition row 0–63 | `range_t` {valid, ID, UP, DN} (17 bits) |
| 8–11 (bank) | 1 | CAM row 0–63 | 20 codes; character *i* in bits [11i+10:11i]; 0 = don't care |
| 8–11 (bank) | 0 | associate row 0–63 | {pattern ID[7:0], remaining length[4:0]} |
| 12 (Stage-1) | – | byte value 0–255 | `range_t` of the depth-2 children of that byte |

`cfg_rdata` reads back the addressed entry; for Stage-1, raise `cfg_re`
while reading. The CAMs take raw codes, so the host encodes (and builds
wildcards). `nids_pkg::fixed1s()` gives the code. A compiler for the tables
is in `tb/tb_nids_top.sv`, tasks `compile` and `make_patterns`. It sorts the
nodes of each depth so that siblings are adjacent, packs sibling groups into
the PEs of the stage, and writes each parent's range. Rows that no range
points to are never enabled, so stale contents need not be cleared when the
tables are rebuilt. Stage-1, which every byte reads, must be rewritten in full.

## Top-level interface

`nids_top` has no parameters; the sizes are constants in `nids_pkg`.

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset (tables are not reset) |
| `in_valid[1:0]`, `in_byte[1:0]` | in | one byte per port (0 = A, 1 = B) when valid |
| `cg_en` | in | enable post-hit clock gating |
| `cfg_*` | in/out | table access, above |
| `hit_valid`, `hit_data`, `hit_pop` | out/out/in | hit FIFO head `{port, pattern ID, offset}`; pop removes it |
| `hit_full`, `hit_dropped` | out | FIFO full, count of records lost to a full FIFO |
| `p2_busy` | out | Phase-2 search in progress |
| `ev_p2_request`, `ev_same_cycle`, `ev_back_to_back`, `ev_overflow[1:0]`, `ev_conflict[1:0]` | out | one-cycle event pulses |
| `cnt_cycles`, `cnt_searched`, `cnt_gated` | out | cycles, bytes searched, bytes skipped by gating |

`ev_conflict` means two sources named the same target on one port in the
same cycle. Tables built as described never cause it. If it happens, the
lower source wins.

## Sizes and what fits

| item | built | source |
|---|---|---|
| Phase-1 PEs | 8 × 64 rows, 11-bit CAM + 17-bit transition entry | paper: 8 PEs of 64 rows |
| Stage-1 | 256 × 17 bits, two read ports | size is this design's (one entry per byte) |
| Phase-2 | 4 banks × 64 rows × 220 bits, + 13-bit associate entries | paper: four 64 × 220 banks |
| pattern remainder | ≤ 20 bytes after the prefix | follows from 220 / 11 |
| arbiter queue, hit FIFO | 2 per port, 16 | this design's |

The paper's test set, a 240-rule Snort subset, needs 240 Phase-2 rows; 256
are available. For Phase-1, the paper gives state counts per depth for a
Snort sub-ruleset: 75, 166, 191 and 194 states at depths 1 to 4. With a
prefix depth of 3, depths 2 and 3 need 357 PE rows, which fit in the 512
available. With a prefix depth of 4 they need 551 rows, which do not fit.
The paper does not say whether this is the same subset as its 240 test rules.
A sibling group must fit in one 64-row PE, and a state with more than 64
children cannot be stored.

## Prefix depth against traffic: the sweep testbench

The paper measures energy for a Phase-1 with one to four stages, under
growing shares of malicious traffic. `tb/tb_workload_sweep.sv` runs the same
sweep on the RTL. It uses 48 random patterns, K = 1 to 4, and 0/15/30/90 % of
packet gaps followed by an embedded pattern, with clock gating on. It counts
the activity that energy follows. Every hit is checked against a software
search. One run gave:

| stages (K) | malicious | Phase-1 bytes searched | Phase-2 searches | bytes gated | hits |
|---|---|---|---|---|---|
| 1 | 0 % | 1208 | 0 | 0 | 0 |
| 1 | 30 % | 1070 | 118 | 138 | 30 |
| 1 | 90 % | 966 | 178 | 242 | 50 |
| 2 | 90 % | 971 | 150 | 237 | 53 |
| 3 | 90 % | 1005 | 69 | 203 | 52 |
| 4 | 30 % | 1139 | 27 | 69 | 27 |
| 4 | 90 % | 1044 | 52 | 164 | 52 |

A deeper Phase-1 filters out most false prefix matches before they reach the
wide Phase-2 CAM. With four stages, nearly every Phase-2 search is a hit. The
more malicious the traffic, the more bytes the post-hit gating skips. In the
paper's measurements, this is why more stages pay off at low attack rates,
and why gating flattens energy against hit rate. RTL counts are not energy,
and the balance point depends on the CAM energy per row, which is not
modelled. The exact numbers depend on the random seed.

## Where this RTL departs from or goes beyond the paper

These points follow the paper:

* the three-phase split;
* the pipelined AC with row-range enabling and the next-range format
  {PE ID, UP, DN};
* the 8 PEs of 64 rows and four 64 × 220 Phase-2 banks;
* the fixed-1s code (checked against every code the paper prints);
* the 8-T and 7-T cell search rules;
* the two-level range decoder and its example;
* the two-cycle single-port Phase-2;
* the port-A-priority arbiter;
* clock gating over the matched suffix;
* the Stage-1 two-port SRAM.

These are this design's own choices, because the paper leaves them open:

* **Two ports are two independent streams.** The paper's throughput of two
  bytes per cycle and its wording about "two ports simultaneously" support
  this reading.
* **Numbering and widths.** The PE-ID numbering (8–11 = banks), the 17-bit
  range entry, and the 8-bit pattern ID and 5-bit length are this design's.
* **The 20-byte input window** supplies Phase-2 with the bytes after the
  prefix. The paper shows only an "IO FIFO".
* **Queues and buffers.** The queue depth and drop policy of the arbiter,
  the hit-FIFO depth, and the hit record layout (the paper mentions ID, type
  and offset; there is no type here) are this design's.
* **Ties.** The lowest row wins where several rows match.
* **Clock gating as an enable.** It is expressed as a search enable on the
  matched port only, not as gated clocks.
* **Configuration.** A parallel configuration port replaces the chip's scan
  chain. The paper only labels the scan chain on the micrograph.
* **Analog parts are not modelled.** This covers precharge, sense amplifiers,
  VREF, power gating to retention voltage and the PCH/SAE timing generator.
  Their logical effect is that disabled rows never match.

The paper's measured quantities are outside what RTL can show: energy per
search, the 144 MHz clock, and the > 450 mV sensing margin. Phase-3 (host
software) is not included.

## Files

`rtl/` holds one module or package per file:

| file | block |
|---|---|
| `nids_pkg.sv` | constants, `range_t` / `p2req_t` / `hit_t`, `fixed1s()` |
| `fixed1s_encoder.sv` | byte → 11-bit fixed-1s code |
| `cam8t_cell.sv`, `cam8t_array.sv` | 8-T dual-port cell, 64 × 11 Phase-1 match table |
| `range_decoder.sv` | two-level range decoder |
| `dp_sram.sv` | SRAM with two read ports and one write port |
| `stage1_table.sv` | depth-1 stage |
| `phase1_pe.sv` | Phase-1 PE |
| `global_router.sv` | next-range distribution |
| `phase2_cam_bank.sv` | Phase-2 wildcard CAM bank + associate SRAM |
| `phase2_arbiter.sv`, `phase2_controller.sv` | Phase-2 request queueing and sequencing |
| `global_controller.sv` | offsets, post-hit gating, counters |
| `stream_window.sv`, `hit_fifo.sv` | input window and output FIFO |
| `nids_top.sv` | the engine |

`tb/` holds one self-checking testbench per block, `tb_<module>.sv`. Each
compares its block against an independently computed expectation and prints
`TB_RESULT checks=N failures=M`. `tb_nids_top.sv` runs the whole engine at
its real size. It compiles random patterns into tables for prefix depth 4,
and again for depth 2. It streams traffic on both ports and compares every
hit with a software search of the same streams. The runs cover clock gating
on and off, a burst that overflows the arbiter queue, and congestion on both
ports. `tb_workload_sweep.sv` runs the stage-count and traffic sweep
described above.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          --top-module tb_nids_top rtl/nids_pkg.sv tb/tb_nids_top.sv
./obj_dir/Vtb_nids_top
```

Replace `tb_nids_top` with any other testbench name. The top-level test
takes about two minutes to build and a second to run. The sizes live in
`nids_pkg.sv`. The PE and bank modules also take `ROWS` (and `CHARS`)
parameters, but the 6-bit UP/DN fields of `range_t` assume 64 rows.
