# A directable network core: CASP controller, classifier and merge

Hardware built by high-level synthesis is hard to debug. The program that runs
on the FPGA is a translation of source code, rebuilding the bitstream to add a
probe takes hours, and vendor logic analysers see signals rather than program
variables. This design takes the opposite route: it embeds a small, weak
interpreter (a **CASP machine**, for *Counters, Arrays and Stored Procedures*)
beside the network program. A remote **director** talks to that interpreter with
ordinary network packets. At run time, and without rebuilding anything, the
director can:

* read and change program variables;
* install breakpoints, watchpoints, counters and traces;
* interrupt the program;
* resume it.

The program only has to offer **extension points**: places in its main loop
where it hands control to the interpreter for a few cycles.

The RTL here is the hardware side of that scheme for a packet-processing core
(a "main logical core" between the input arbiter and the output queues of a
NetFPGA-style pipeline). The network program itself, the director software and
the board's MACs, PCIe and queues are not included. The program is replaced in
simulation by a small behavioural model.

```
             +-----------------+  ordinary   +--------------+
  net_in --->| dir_classifier  |------------>| host program |-----+
             |                 |  prog_in_*  | (outside,    |     | prog_out_*
             |                 |             |  ports)      |     v
             |                 |  direction  +--------------+  +-----------+
             |                 |-----+         ^ ep_req/ack    | pkt_merge |---> net_out
             +-----------------+     |         | host_wr/vars  +-----------+
                                     v         v                     ^
                                +--------------------+   replies     |
                                |  casp_controller   |---------------+
                                +--------------------+
```

`phd_core` is the top. It holds the three blocks above. Everything the host
program uses is a port of `phd_core`.

## The CASP machine

### Memory

| part | here | default | use |
|---|---|---|---|
| Counters | `NUM_CTR` signed 64-bit registers | 32 | counters `0 .. NUM_HOST_VARS-1` (default 8) *are* the program's variables; the rest are scratch registers for the director (trace indices, overflow flags, counts) |
| Arrays | `NUM_ARR` RAMs of `ARR_DEPTH` words | 2 x 512 | trace buffers and the like |
| Stored procedures | one slot of `SP_DEPTH` instructions per label, `NUM_LABELS` labels | 4 x 16 | code run at extension points |

The program writes its variables through `host_wr_en/id/data` and reads them on
`host_vars`. A write by the controller to the same counter in the same cycle
wins over the program's write.

### Language

Values are:

* a numeral `N`;
* a counter `X`;
* an array element `R[N]` or `R[X]`.

Expressions are `V`, `-V`, `V1 = V2` and `V1 < V2`. A comparison yields 1 for
true and -1 for false.

Statements are:

* `U := E`, `inc U` and `dec U`;
* `if E then P1 else P2`;
* `break` and `continue`;
* placement `@L:{P}`, which replaces the stored procedure of label `L`.

A program is a sequence of statements. Its result is the value of its last
statement. Placement returns the label's code. `break` and `continue` return
the code of the label that is running.

There are no loops and no backward jumps. Every program ends within its own
length. This weakness is deliberate: the controller only gives controlled
access to memory, and anything clever is done by the director.

### Binary encoding (this design's own)

An instruction (`instr_t`, 236 bits) is:

* `op` (4 bits) and `eop` (2 bits);
* `tgt` (8 bits);
* three operands `u`, `a`, `b`.

Each operand is a kind (immediate, counter, array at an immediate index, array
at a counter index), an 8-bit array id and a 64-bit value.

`if-then-else` is flattened:

```
OP_IF  cond, tgt = |then| + 1     ; if cond <= 0 skip the then-branch and the SKIP
  ... then-branch ...
OP_SKIP tgt = |else|              ; end of then-branch: skip the else-branch
  ... else-branch ...
```

A `then` without an `else` needs no `OP_SKIP`. `OP_PLACE` with `u` = label and
`tgt = n` takes the next `n` instructions as the new body of that label's
procedure. Those instructions are stored and not run. `n = 0` empties the
procedure, and an empty procedure behaves as `continue`. Nested placement cannot
be expressed. `casp_pkg` has builder functions (`imm`, `ctr`, `arr_imm`,
`arr_ctr`, `mk`) that assemble instructions.

Example: the procedure that traces variable 1 into array 0 and breaks when 500
entries are full (counters 8 and 9 are the index and the overflow flag):

```
@L0:{ if X8 < 500 then { A0[X8] := X1; inc X8; continue }
      else            { inc X9; break } }
=> PLACE L0,6 ; IF (X8<500),3 ; ASSIGN A0[X8],X1 ; INC X8 ; CONT ; INC X9 ; BREAK
```

The then-branch ends in `continue`, so no `OP_SKIP` is needed.

## Modes and the extension point

The controller is in one of two modes.

**Batch mode** (after reset):

* The program runs freely.
* At an extension point the program raises `ep_req`. It holds `ep_labels`, a
  bit per label, stable until the controller answers.
* The controller runs the stored procedure of every label in the set, in index
  order, each to its end.
* If all of them `continue`, it pulses `ep_ack` and the program goes on.
* If any of them `break`s, the controller records that label's code in
  `brk_code`, switches to **interactive mode** and holds `ep_ack` back. The
  program stays stopped at its extension point: this is a breakpoint.

**Interactive mode:**

* The director's programs run as they arrive.
* Placement is allowed only in this mode. In batch mode a placement is refused,
  flagged in the reply's `err` bit and stores nothing, so a running program
  never has its extension points rewritten under it.
* A director program ending in `continue` returns to batch mode and releases the
  held program.
* `break` keeps the controller interactive and tells the director which label
  broke.

**Interruption:** a director `break` sent in batch mode switches to
interactive mode at once. The program is then stopped at the next extension
point it reaches, and the director can work with it exactly as after a breakpoint.

While a stored procedure runs, direction packets wait. A pending extension point
is served before a new direction packet.

## Direction packets and replies

A direction packet is an ordinary packet on the core's input stream. The
stream is 256 data bits plus `last`, with valid/ready. The first beat carries
`16'hD1EC` in bits `[255:240]`. Every following beat holds one instruction in
its low 236 bits.

`dir_classifier` looks only at the first beat. It keeps the chosen route until
`last`. Direction packets go to the controller and all other packets to the
program.

Each direction packet gets one reply beat (`reply_t`). From the top:

| field | width | content |
|---|---|---|
| tag | 16 | `16'hD1EC` |
| reserved | 6 | |
| `err` | 1 | refused placement, or a write to a bad address |
| `mode` | 1 | mode after the program |
| `brk` | 8 | code of the label that last broke (label index + 1; 0 = the director's own break) |
| reserved | 160 | |
| `value` | 64 | result of the last instruction |

`pkt_merge` joins the program's output and the replies onto the output stream.
It moves whole packets, alternating between the two sources when both wait. An
offered beat stays offered until it is taken.

## Timing

The controller executes one instruction per clock.

| event | latency (no stalls) |
|---|---|
| director program of k instructions | reply valid k + 1 cycles after the header beat is offered |
| extension point whose procedures execute n instructions (an empty one counts 1) | `ep_ack` n + 1 cycles after `ep_req` rises |
| no-op extension point | 2 cycles |
| `count` procedure (if, inc, continue) | 4 cycles |
| `trace` procedure (if, :=, inc, continue) | 5 cycles |

The classifier and the merge add no register stage. With the behavioural
program of the testbenches, a single-beat packet takes 5, 7 or 8 cycles from
input to output with a no-op, count or trace procedure at its one extension
point (`ep_overhead_tb`). For comparison, the
measurements of the original HLS-built prototype add 5 and 13 cycles to a 57-cycle DNS packet for count
and trace procedures compiled by HLS. Here the same work costs 2 and 3 cycles
over a no-op, on top of the program's own time.

## Where this design departs from, or adds to, the original scheme

* **Encoding and layout.** The instruction encoding, the packet tag, the reply
  format, the 64-bit word and the 256-bit stream are all this design's own. The
  original scheme defines the language, not its bits.
* **`break` and `continue` end a program at once.** This matches the prose
  description. The formal sequencing rule would let a program go on after a
  `break` that does not change the mode.
* **Conditions.** `if` takes its then-branch when the condition is > 0, which
  fits the 1/-1 comparison values.
* **Label codes** are label index + 1.
* **Multiple labels at one extension point** all run, even after one breaks.
  The controller turns interactive once the last of them finishes.
* **Bad references.** Out-of-range counters or array elements read 0 and
  writes to them are dropped and flagged.
* **Reset.** Counters reset to 0 and procedures to empty. Array contents are
  not reset.
* **Head-of-line blocking.** The classifier has no buffer. A direction packet
  that arrives behind an ordinary packet the stopped program has not accepted
  waits with it. A director should not send ordinary traffic to a program
  stopped at a breakpoint, or the core needs a small FIFO on the program side.
* **Not included:** the host program, the director software and the board
  infrastructure. Only one host program interface (one extension point
  handshake, one variable write port) is provided.

## Files

| file | content |
|---|---|
| `rtl/casp_pkg.sv` | widths, instruction / beat / reply types, builder functions |
| `rtl/casp_controller.sv` | the CASP machine |
| `rtl/dir_classifier.sv` | input split into direction packets and ordinary packets |
| `rtl/pkt_merge.sv` | packet-level round-robin merge of program output and replies |
| `rtl/phd_core.sv` | top: the three blocks wired together; the host program connects through ports |
| `tb/host_program_model.sv` | behavioural request/response program with one extension point |
| `tb/ep_overhead_tb.sv` | cost of one extension point holding a no-op, a count or a trace procedure |
| `tb/*_tb.sv` | self-checking testbenches, each printing `TB_RESULT checks=.. failures=..` |

## Simulating

Each testbench builds with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module phd_core_tb \
  rtl/casp_pkg.sv rtl/casp_controller.sv rtl/dir_classifier.sv rtl/pkt_merge.sv \
  rtl/phd_core.sv tb/host_program_model.sv tb/phd_core_tb.sv
./obj_dir/Vphd_core_tb
```

* `casp_controller_tb` covers:
  * every instruction and expression;
  * if-then-else;
  * counter-indexed arrays;
  * refused placement in batch mode;
  * interruption;
  * trace, count and watch procedures;
  * extension points with several labels;
  * the cycle counts in the timing table;
  * updating variables while the program is stopped.

  It uses 16-entry arrays to stay short.
* `dir_classifier_tb` and `pkt_merge_tb` drive random packets under random
  back-pressure against scoreboards.
* `phd_core_tb` runs the whole core at its default sizes with the program
  model. It takes well under a second:
  * ordinary traffic;
  * queries;
  * a refused placement;
  * an interruption;
  * installation of trace-500, count-5000 and watch procedures;
  * a trace that fills all 500 entries and breaks on the 501st;
  * read-back of every entry;
  * a variable update that changes the program's next answer;
  * a watchpoint hit;
  * counting to 5000 and the break after it.

  It counts each of these mechanisms, and merge contention and back-pressure as
  well. It fails if any of them never happened.

* `ep_overhead_tb` places a no-op, a count and a trace procedure in turn at the
  program's single extension point. It checks the cycle counts of the timing
  table and the resulting packet durations.

All sizes are parameters of `phd_core` / `casp_controller`. `NUM_CTR`,
`NUM_HOST_VARS`, `NUM_ARR`, `NUM_LABELS` and `SP_DEPTH` are free choices.
`ARR_DEPTH = 512` is the smallest power of two holding a 500-entry trace.
