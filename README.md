# NAPOLY+: a scored NFA processor for sequence alignment

An automata processor runs many states of a non-deterministic finite
automaton (NFA) at once and reports when an accepting state is reached. That
answers "does the pattern occur here?", but sequence alignment asks more:
*how well* does it occur? NAPOLY+ adds scores to an NFA overlay. Every state
carries a signed score (for DNA, for example +2 for a matching base, -1 for a
mismatch, -2 for a gap). Each active path adds up the scores of the states it
passes through. When an accepting state becomes active, the processor reports
which state it was, where in the input it happened and the best score with
which it was reached.

This repository holds synthesizable SystemVerilog for that processor: the
scored state elements, their interconnect, the report path, the buffers
facing external memory and a controller that sequences configuration and
streaming. It follows the published description of NAPOLY+ (an extension of
the NAPOLY FPGA overlay) where that description goes, and fills in the rest
with simple choices, listed in [Where this design goes beyond the published description](#where-this-design-goes-beyond-the-published-description).

## Scoring semantics

The automaton is in the homogeneous form used by ANML and the Micron
Automata Processor. The symbol test belongs to the *state*, not to the edge:
a state, called an STE+ (scored State Transition Element), holds

* a **symbol class**: one bit per byte value, so any set of bytes;
* a **score**: a signed 16-bit number;
* an **accepting** flag;
* up to `MAX_FAN` **fan-in wires**. Each wire names one predecessor STE+.

There is also a **start state**. It is active on every symbol and carries
score 0. It is not an STE+ slot: every non-accepting STE+ has a dedicated
start fan-in that is always on. Accepting STE+s have no start fan-in.

For every input symbol `c`, all STE+s update together:

```
enabled(v)  = (v is not accepting)                      -- start fan-in
              or (some fan-in wire of v names an active STE+)
incoming(v) = max( 0 if v is not accepting,
                   score(u) for every active predecessor u on a wire of v )
active'(v)  = enabled(v) and c in class(v)
score'(v)   = active'(v) ? sat16(incoming(v) + own_score(v)) : 0
```

`sat16` clamps to [-32768, 32767]. Two things follow from this rule.

* **Every non-accepting STE+ can open a path at every symbol**, with
  incoming score 0. A pattern may therefore be matched from any of its
  states, not only from its first one. For alignment, this means that
  a shorter, better-scoring local match can win against a long one.
* **The best path wins.** When paths meet at one STE+, only the largest
  incoming score is carried on. The reported score of an accepting STE+ is
  the highest total over all paths that reach it on that symbol. Because the
  start fan-in brings 0, a negative prefix is dropped in favour of a new
  path.

### Example

With match +2, mismatch -1 and gap -2, encode the pattern `AGC`:

| STE+ | class        | score | accepting | fan-in wires         |
|------|--------------|-------|-----------|----------------------|
| a    | `A`          | +2    | no        | —                    |
| g    | `G`          | +2    | no        | a                    |
| x    | `A`,`T`      | -1    | no        | a   (mismatch after A) |
| y    | `A C G T`    | -2    | no        | g, y (gap, self loop)  |
| c    | `C`          | +2    | yes       | g, x, y              |

The input `AGC` reports STE+ `c` at offset 2 with score 2+2+2 = 6. `ATC`
reaches `c` through the mismatch state with 2-1+2 = 3. `GC` reports 4,
because `g` opens its own path. `C` alone reports nothing: `c` is
accepting, so it has no start fan-in. The testbenches check all of these
numbers.

## Block structure

```
            DRAM side                                        DRAM side
               |                                                 ^
   pat_* -> [pattern buffer] --cfg words--> +------------+       |
                                            | controller |   [output buffer] <- records
   in_*  -> [input buffer] ----symbols----> +------------+       ^
                                              | cfg / step        |
                                              v                   |
                        +-------------------------------+   +-------------+
                        | STE+ array                    |-->| report unit |
                        |  N x ste_plus                 |   +-------------+
                        |  ste_interconnect (fan-in)    |     can_step (stall)
                        +-------------------------------+ ------> controller
```

| module             | role |
|--------------------|------|
| `napoly_pkg`       | widths, command and record formats, saturating add |
| `ste_plus`         | one STE+: symbol class memory, score register, accepting flag, max-plus update |
| `ste_interconnect` | global bus of all STE+ outputs; `MAX_FAN` selectable fan-in wires per STE+ |
| `ste_array`        | `N` STE+s and the interconnect; decodes configuration commands |
| `report_unit`      | turns active accepting STE+s into records, one per cycle; produces the stall |
| `napoly_ctrl`      | modes IDLE / CONFIG / RUN / DRAIN; feeds configuration and symbols |
| `sync_fifo`        | the pattern, input and output buffers |
| `napoly_plus`      | top level |

### Interconnect

The published design builds its edges from global wires, which run across
the array and carry every STE+'s output, and from a limited number of local
wires into and out of each STE+. Here the global wires are a bus of `N`
activity bits and `N` 16-bit scores. Each STE+ owns `MAX_FAN` local wires.
Each local wire is a register holding a source index and an enable bit, and
drives an `N`:1 selector on the bus. An edge `u -> v` is programmed as
"a wire of `v` selects `u`". An STE+ can feed any number of successors but
can receive only `MAX_FAN` edges, plus its start fan-in. The selector logic
grows as `N * MAX_FAN * N`. That product, not the STE+s themselves, is what
limits the array size in a real implementation.

## Configuration

Configuration words are 64 bits wide (`napoly_pkg::cfg_word_t`) and are
written into the pattern buffer:

| bits  | field   | meaning |
|-------|---------|---------|
| 63:60 | `op`    | command, below |
| 59:44 | `ste`   | addressed STE+ (0 .. N-1; larger ids are ignored) |
| 43:40 | `sel`   | symbol-class chunk (`OP_SYM`) or fan-in slot (`OP_FAN`) |
| 39:32 | `flags` | bit 0: accepting (`OP_SCORE`) or wire enable (`OP_FAN`) |
| 31:0  | `data`  | class bits, score (low 16 bits), or source STE+ id |

| op  | name       | effect |
|-----|------------|--------|
| 0x0 | `OP_NOP`   | none |
| 0x1 | `OP_SYM`   | class bits `[32*sel +: 32]` of STE+ `ste` := `data` |
| 0x2 | `OP_SCORE` | score := `data[15:0]`, accepting := `flags[0]` |
| 0x3 | `OP_FAN`   | wire `sel` of `ste` := source `data`, enabled if `flags[0]` |
| 0x4 | `OP_CLEAR` | whole array: all classes empty, scores 0, not accepting, wires off |
| 0xF | `OP_END`   | end of configuration; start streaming the input |

A new pattern set usually begins with `OP_CLEAR`. To run new input with
the patterns already loaded, write only `OP_END`. One configuration word is
applied per clock cycle.

## Streaming and reporting

Input entries are 9 bits: a byte and a `last` flag (`in_entry_t`). After
`OP_END` the controller deactivates every STE+ and restarts the symbol
offset at 0. It then takes one symbol per cycle from the input buffer and
steps the whole array with it. All STE+s update in that same cycle, however
many are active.

After each step, the report unit scans the accepting STE+s that are now
active. It writes one 64-bit record per cycle into the output buffer,
lowest STE+ id first:

| bits  | field    |
|-------|----------|
| 63:48 | STE+ id  |
| 47:16 | offset of the symbol (0 = first symbol after `OP_END`) |
| 15:0  | score    |

**Stall.** The array's state is held in its registers. The next symbol can
be taken only once every record of the current symbol has been written.
The report unit's `can_step` is high when nothing remains after the record
of this cycle. So the stream runs at one symbol per clock as long as at most
one accepting STE+ fires per symbol and the output buffer has room.
Otherwise the input waits: one extra cycle per extra record, and as long as
the output buffer stays full. After the symbol flagged `last`, the
controller waits until its records are written, pulses `done` and returns
to IDLE.

Timing: a configuration word or symbol written into a buffer can be used at
the earliest one cycle later. A record appears in the output buffer one cycle
after the step that produced it. All buffers are first-word fall-through.
Reset is synchronous and active low. It empties the buffers, clears the
whole configuration and puts the controller in IDLE.

## Parameters

| parameter   | default | meaning |
|-------------|---------|---------|
| `N`         | 1024    | STE+s in the array (the published evaluation used 1K to 64K; ids are 16 bits, so at most 65536) |
| `MAX_FAN`   | 4       | fan-in wires per STE+ (no value is published) |
| `PAT_DEPTH`, `IN_DEPTH`, `OUT_DEPTH` | 64 | buffer depths (powers of two) |

Widths are fixed in `napoly_pkg`: 8-bit symbols, 16-bit scores, 16-bit ids
and 32-bit offsets.

The default `N` is the smallest published array. The 64K array fits the
RTL, but at the default size the design holds 1K states. The
fan-in selectors grow with `N^2`. A gate-level synthesis of the default
configuration is therefore a large job: the design has about 1024 * 4 * 17
selectors, each 1024 to 1.

## Where this design goes beyond the published description

The published description gives the STE+ behaviour, the always-active start
state with its dedicated fan-in, the score register and symbol memory per
state, the accepting states without a start connection, the global/local
wire interconnect, the buffers and the report contents. The following are
choices of this design:

* Paths are combined by **maximum** and scores are **added**. The
  description says that the incoming score and the state's score are
  combined to find the highest score; it does not name the operators.
* 16-bit signed scores with saturation.
* The symbol class is 256 bits per STE+. It is kept in an 8 x 32 memory
  with no reset, read asynchronously by the input byte and written one
  32-bit word at a time. Eight valid flags, one per word, let reset and
  `OP_CLEAR` empty the class in one cycle.
* Local wires are fan-in selectors. The description speaks of a limited
  fan-out; here the limit is per destination.
* The configuration word format, the `OP_CLEAR`/`OP_END` commands and the
  `last` flag on input symbols.
* The report record format, one record per cycle in ascending id order, and
  the stall of the input while records are pending. The published
  throughput figures leave out the time for flushing results, so they do
  not constrain this part.
* Buffer depths of 64 and the IDLE/CONFIG/RUN/DRAIN controller.
* External memory is not part of the design. The buffers' far sides are
  the top-level ports.

The published worked example also gives a score of -1 for the sequence
`AGATG` on its example automaton. That value depends on how that automaton's
mismatch edges and self loops are scored, which is not stated, so it is not
reproduced here. The `AGC` = 6 result is reproduced.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`.

| testbench             | what it checks |
|-----------------------|----------------|
| `tb_sync_fifo`        | FIFO order, full and empty flags, against a queue model |
| `tb_ste_plus`         | class membership, start fan-in, maximum of incoming scores, accepting STE+ without start, saturation, random steps against a model |
| `tb_ste_interconnect` | random wiring including out-of-range writes, against a model; `OP_CLEAR` |
| `tb_ste_array`        | the `AGC`/`ATC`/`GC`/`C` example; random automata on random DNA, full state compared after every symbol |
| `tb_report_unit`      | record order and contents, one record per cycle, `can_step`, output back-pressure |
| `tb_napoly_ctrl`      | mode sequence, command order, `run_clear`, symbol order, offsets, `done`, one symbol per cycle |
| `tb_napoly_plus`      | whole processor at default size (1024 STE+s, 4 wires) |
| `tb_napoly_plus_scale`| the same test on 4096 STE+s with 8 wires each |

`tb_napoly_plus` drives the buffers as the memory side would. It reads the
output buffer with random pauses, so the buffer fills. It predicts every
record with a reference model (`tb/napoly_ref_pkg.sv`) that implements the
rule above independently of the RTL. It runs the example automaton, a
random automaton over all 1024 STE+s on two random DNA texts (the second
without reconfiguration), and a saturating chain. It counts the following
and fails if any never happens: reconfiguration, a run without
reconfiguration, a stall for several reports, a stall for a full output
buffer, paths opened by the start fan-in, paths extended through wires, and
saturation. It runs in about a second. `tb_napoly_plus_scale` repeats it on
a four times larger array with twice the wires. It is the largest size
simulated here: building the simulator takes a few minutes at 4096 STE+s
and grows with the square of `N`.

To simulate with Verilator, list the packages first:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/napoly_pkg.sv tb/napoly_ref_pkg.sv \
    rtl/sync_fifo.sv rtl/ste_plus.sv rtl/ste_interconnect.sv rtl/ste_array.sv \
    rtl/report_unit.sv rtl/napoly_ctrl.sv rtl/napoly_plus.sv \
    tb/tb_napoly_plus.sv --top-module tb_napoly_plus -o sim
./obj_dir/sim
```

Any other testbench is built the same way with its own top module. The
simulation is two-state: every register that is read is reset or
configured before use.
