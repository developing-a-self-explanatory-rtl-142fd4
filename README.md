# An NFA transducer engine on a PE array

This engine maps one symbol stream onto another with a *finite state
transducer*: an automaton whose edges each carry an input symbol and an output
symbol. No training is involved. A new mapping is a new set of edges, written
into on-chip memory through a configuration port. The automaton may be
non-deterministic, so several paths can be active at once. Hardware handles
that well, because every edge is a small processing element (PE) that evaluates
in parallel with all the others.

The design follows a short poster paper on a "self-explanatory" (training-free)
transformer for FPGAs. That paper builds on an FPGA overlay for
non-deterministic automata, which in turn was modelled on Micron's Automata
Processor. The paper describes the organisation, the memories and the clock
budget. Most interfaces and encodings in this RTL are choices made here, and
the sections below say which ones.

The running example is the transducer that turns `hello` into `hi`:

```
 (0) -h:h-> (1) -e:i-> (2) -l:ε-> (3) -l:ε-> (4) -o:ε-> ((5))
```

It has five edges and needs five PEs.

## Edges as processing elements

Each PE holds one edge of the automaton:

| PE storage | size | meaning |
|---|---|---|
| match RAM (`symbol_ram`) | 256 x 1 | bit *s* = 1 if the edge accepts input symbol *s* |
| switch mask (`pe_switch`) | 4 bits | which neighbours (N, E, S, W) hold edges that lead into this one |
| start mode | 2 bits | `START_NONE`, `START_SUB` (first symbol of a sub-sequence), `START_ALL` (every symbol) |
| report flag | 1 bit | reaching the end of this edge completes a match |
| transduction entry (`transduction_unit`) | 8 bits | the edge's output symbol; 0 encodes ε |

A PE is **enabled** for a symbol when its start mode allows it, or when a
neighbour selected by its mask was active on the previous symbol. It
**fires** (becomes active) when it is enabled and its match bit for the symbol
is 1. An edge-to-edge transition is a set mask bit. Two edges can only follow
one another if their PEs are grid neighbours. So an automaton has to be *placed*:
a chain of edges is laid out as a path through the grid. An edge with more than
four predecessors or successors cannot be placed. The paper names this
neighbour-only wiring as the main limitation of its design.

The PEs form a `ROWS x COLS` grid. PE (r, c) has index `r*COLS + c`, and every
PE-indexed vector and table uses that index. The default grid is 64 x 96 =
6144 PEs. That is this design's reading of "6K", the largest array in the
paper's results, which also lists 1K, 2K and 4K arrays.

### Two clocks per symbol

The paper budgets two clocks per symbol for a transition, and the PE uses them
as two phases:

1. **strobe**: the broadcast symbol addresses the match RAM, and the match bit
   is registered.
2. **step**: `active <= match & (start_ok | neighbour_enable)`. During this
   clock `active_next` already shows the new value, which is what the state
   vector records.

## Sub-sequences and the clock budget

The input stream is cut into sub-sequences of `N` symbols (default 1000, the
value in the paper's results). Each sub-sequence starts from a cleared array,
so no path crosses a sub-sequence boundary. The `controller` runs five phases,
one after another:

| phase | clocks | what happens |
|---|---|---|
| `ST_LOAD` | N | symbols enter the input buffer (`in_valid`/`in_ready`); activations and the state vector are cleared |
| `ST_RUN` | 2N | strobe/step per symbol |
| `ST_FLUSH_VEC` | 1 | the state vector is pushed into the FIFO |
| `ST_TRANSDUCE` | M | one PE index per clock is checked against the vector |
| `ST_OUTPUT` | N | the output sub-sequence leaves (`out_valid`/`out_ready`/`out_last`) |

A matched sub-sequence therefore takes **4N + M + 1** clocks, as in the paper's
formula. At N = 1000 that is 5025, 6049, 8097 and 10145 clocks for the 1K, 2K,
4K and 6K arrays. If no report PE fired by the end of `ST_RUN`, the vector is
discarded and the controller goes straight back to `ST_LOAD`. That costs 3N
clocks. The paper gives no figure for a discarded sub-sequence, so this cost is
this design's own. Stalls on either stream lengthen the load and output phases
by the stalled clocks. The phases are not overlapped, because the paper's
formula adds them up.

## From activations to output symbols (the part to read carefully)

While a sub-sequence runs, `state_vector` ORs the activations of every step
into an M-bit vector, one bit per PE. It also keeps a sticky `matched` flag
that is set when a PE with the report flag fires. On a match, the vector goes
through `vector_fifo` to `transduction_unit`. That unit walks the PE indices
0..M-1, one per clock. For every set bit it appends the PE's output symbol to
the output buffer, up to N symbols. The output sub-sequence is always N
symbols long: positions that were not filled read as 0 (ε).

Several consequences follow, and a user should know them:

* **Order comes from placement.** Output symbols come out in PE-index order,
  not in time order. An automaton must be placed so that every path runs
  through increasing PE indices: for example, east along a row and then south.
  Both test transducers are placed this way.
* **Paths are merged.** The vector records *which* PEs fired, not *when* or
  on which path. If a sub-sequence holds a match and also the start of another
  pattern, the output contains the symbols of both. In the end-to-end test,
  `hello` and `het` share the prefix `he`. A sub-sequence that contains `hello`
  therefore also emits the `x` of the `e:x` edge. The paper itself names the
  tracking of many simultaneous paths as an open problem. It describes the
  vector as logging "activated PE IDs" with a maximum size of O(m²), but
  draws it as m wide. This design takes the drawn width.
* **ε is a symbol here.** Edges with output ε write a 0 into the output
  buffer. They are not skipped, which matches the paper's assumption that
  every input symbol has exactly one output symbol.

## Configuration

`cfg` (`nfa_pkg::cfg_t`) is a write-only bus, one write per clock:

| `target` | uses | effect |
|---|---|---|
| `CFG_SYM` | `pe`, `sym`, `data[0]` | match RAM bit `sym` of PE `pe` |
| `CFG_SWITCH` | `pe`, `data[3:0]` | neighbour mask (bit 0 N, 1 E, 2 S, 3 W) |
| `CFG_START` | `pe`, `data[1:0]` | start mode |
| `CFG_REPORT` | `pe`, `data[0]` | report flag |
| `CFG_OUT` | `pe`, `data[7:0]` | output symbol |

Reset clears the masks, start modes, report flags and activations. It does not
clear the match RAMs or the transduction table. An unconfigured PE can
therefore never fire, and all 256 match bits of a PE must be written before the
PE is used. Write the configuration while the engine waits in `ST_LOAD` with no
input offered. Loading one PE takes 260 writes.

## Modules

| module | role |
|---|---|
| `nfa_pkg` | symbol type, direction, start-mode, config and phase types |
| `symbol_ram` | 256 x 1 match RAM, asynchronous read |
| `pe_switch` | 4-bit neighbour mask and the OR of the enabled neighbours |
| `pe` | one edge: match RAM, switch, start mode, report flag, two-phase activation |
| `pe_array` | ROWS x COLS grid, neighbour wiring, config decode |
| `state_vector` | OR of activations over a sub-sequence, sticky match flag |
| `vector_fifo` | first-word-fall-through FIFO of state vectors, depth 2 |
| `transduction_unit` | output-symbol table and the M-clock scan |
| `symbol_buffer` | N-entry symbol RAM, used for the input and the output sub-sequence |
| `controller` | phase sequencer, stream handshakes, match/discard counters |
| `nfa_transformer` | top level |

Top-level parameters: `ROWS` (64), `COLS` (96), `N` (1000), `FIFO_DEPTH` (2).
The ports are `clk`, `rst_n` (asynchronous, active low), `cfg`, the input stream
`in_valid`/`in_sym`/`in_ready`, the output stream
`out_valid`/`out_sym`/`out_last`/`out_ready`, and for observation `state`,
`n_matched` and `n_discarded`.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints a
`TB_RESULT checks=… failures=…` line and has a watchdog. The testbenches compare
against models written independently of the RTL. `tb_pe_array` runs random
automata on a 3 x 4 grid against a grid-NFA model. `tb_controller` checks every
phase length, strobe and address. `tb_nfa_transformer` runs the whole engine
end to end at 4 x 4 PEs and N = 12. It uses the `hello`→`hi` transducer, a
second pattern `het`→`hxy` that shares `he` with it, and a `z` that matches
only at the start of a sub-sequence. Random sub-sequences are streamed through
it, and every output symbol is compared with a reference model. The clock count
of each unstalled sub-sequence is checked against 4N + M + 1 or 3N. The test
also counts matches, discards, steps with parallel active paths,
start-of-sub-sequence matches and stalls on both streams, and fails if any of
them never happened.

`tb_nfa_1k` runs the same checks on the smallest array in the paper's results:
32 x 32 = 1024 PEs with N = 1000. It checks that a matched sub-sequence takes
5025 clocks.

Run a test with plain Verilator, for example:

```
verilator --binary --timing --assert rtl/nfa_pkg.sv rtl/*.sv \
    tb/tb_nfa_transformer.sv --top-module tb_nfa_transformer
./obj_dir/Vtb_nfa_transformer
```

(`nfa_pkg.sv` must come first. Listing it twice is harmless.) Verilator has
no X state, so start with `+verilator+rand+reset+2` to catch uninitialised
reads.

**Size limits of simulation.** The full 6144-PE configuration lints and
elaborates in about a minute. A Verilator simulation build at that size, though,
produces generated C++ on which the C++ compiler needed more than 15 GB of
memory and did not finish, so no simulation at the default size is provided.
The largest size simulated is 1024 PEs with N = 1000 (`tb_nfa_1k`). The RTL is the same at every size: only `ROWS`, `COLS` and `N`
change.

## Where this RTL departs from, or adds to, the paper

* The paper says the switches let PEs communicate "with and through"
  neighbours, and elsewhere that they reach only immediate neighbours. Only the
  latter is built: there is no route-through.
* Four neighbours (not eight), the mask encoding, start modes and per-PE report
  flags are this design's choices.
* The state vector is an OR over the sub-sequence, one bit per PE. Output order
  is PE order. Both are readings of a short description (see above).
* The FIFO depth, the stream handshakes, the configuration bus, the reset
  behaviour, the ε encoding (0) and the 3N-clock discard are this design's own.
* The paper reports 500 MHz on a Zynq device. Nothing here has been timed on
  hardware. The combinational `report_any` OR over all PEs, and the M-bit FIFO
  word, are the likely critical paths at full size.
