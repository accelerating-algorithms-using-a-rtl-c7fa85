# A static dataflow graph in hardware: operators, arcs and a Fibonacci graph

In this design the algorithm is not run on a processor. It is a circuit shaped
like the algorithm's dataflow graph. Each node of the graph is a small
hardware operator: an adder, a comparator, a copy, a merge or a branch. Each
edge (arc) is a 16-bit parallel bus plus two handshake wires. A value travels
through the graph as a *token*. An operator fires as soon as every input it
needs holds a token. No central controller and no schedule are involved: the
arrival of data starts the computation. The graph is *static*: an arc holds at
most one token. A sender therefore cannot send again until its receiver has
taken the previous token.

This RTL gives the operator library and, as a complete example, the Fibonacci
benchmark written as a 20-operator graph. It is SystemVerilog (IEEE
1800-2017), synthesizable, and simulates with plain Verilator.

## Files

| file | content |
|---|---|
| `rtl/df_pkg.sv` | bus width, controller states, operation codes, evaluation functions |
| `rtl/df_chan_if.sv` | one arc: `data`, `str`, `ack`, with handshake assertions |
| `rtl/df_in_reg.sv`, `rtl/df_out_reg.sv` | input port (register + status bit + ack), output port (register + strobe) |
| `rtl/df_primitive.sv` | ADD, SUB, MUL, DIV, AND, OR, NOT (parameter `OP`) |
| `rtl/df_decider.sv` | IFgt, IFge, IFlt, IFle, IFeq, IFdf (parameter `CMP`) |
| `rtl/df_copy.sv` | one input, two identical outputs |
| `rtl/df_ndmerge.sv` | non-deterministic merge: first token in goes out |
| `rtl/df_dmerge.sv` | deterministic merge: a control token picks input a or b |
| `rtl/df_branch.sv` | branch: a control token routes the data to output t or f |
| `rtl/df_fibonacci.sv` | top: the Fibonacci graph |
| `tb/tb_df_*.sv` | one self-checking testbench per operator and one for the top |
| `tb/tb_df_src.sv`, `tb/tb_df_sink.sv` | token source and sink models used by the testbenches |

## The arc and its handshake

An arc from a sender's output `z` to a receiver's input `a` has three parts:

* `z -> a`: the 16-bit data bus.
* `strz -> stra`: the strobe. 1 means a token is on the bus.
* `acka -> ackz`: the acknowledge. **0 means the receiver is ready. 1 means it is busy.**

A token moves at a rising clock edge where `str = 1` and `ack = 0`. Both sides
see the same two registered signals, so both know at that edge that the
transfer happened. The receiver loads the token and sets `ack` to 1. The
sender drops `str`. No extra acknowledge cycle is needed.

The rule only holds if the receiver never shows `ack = 0` while it cannot take
a token. Each input port therefore keeps `ack` as a register. It is set when
the port fills and cleared when the operator empties the port. `ack` is also
1 from reset until `start`. That way an operator that has not started never
looks ready.

A sender must keep `str` high and the data unchanged until the token is
taken. `df_chan_if` checks this with two concurrent assertions. They are
active in every arc of the top when simulating with `--assert`.

## The operator controller

Every operator has the same structure. Each input arc has a 16-bit register
with a status bit (`bita`, `bitb`, ...). Each output arc has a 16-bit register
whose status bit is the outgoing strobe. A five-state controller runs the
operator:

| state | action |
|---|---|
| S0 | after reset: all status bits 0, all `ack` = 1; wait for `start` |
| S1 | take tokens on the input arcs in any order, setting status bit and `ack` of each |
| S2 | all needed inputs present: compute and load the output register(s), raise the strobe(s) |
| S2_WAIT | hold the result until every receiver has taken its token |
| S3 | clear the status bits and acknowledges of the consumed inputs; back to S1 |

An operator does not take a new set of operands while its result is still
waiting. This is what makes the graph static. It also means an operator
handles one token set at a time and is not pipelined.

**Timing**, with a receiver that is always ready: the result is on the output
bus with `str = 1` two cycles after the edge that captured the last needed
operand. The receiver takes it one cycle later, and the input `ack`s drop one
cycle after that. The input ports reopen four cycles after the capture, so
one operator fires at most once every five cycles. Most of that cost comes
from following the original four-state chart one state per cycle. The
operator testbenches check these latencies.

## The operators

| module | inputs | outputs | fires when | consumes | sends |
|---|---|---|---|---|---|
| `df_primitive` | a, b | z | a and b present | a, b | `OP(a, b)` |
| `df_decider` | a, b | z | a and b present | a, b | 1 if `a CMP b`, else 0 |
| `df_copy` | a | z1, z2 | a present | a | a on both outputs; finishes when both are taken |
| `df_ndmerge` | a, b | z | a or b present | the one sent | that token |
| `df_dmerge` | a, b, c | z | a, b and c present | a, b and c | a if c is TRUE, else b |
| `df_branch` | a, c | t, f | a and c present | a, c | a on t if c is TRUE, else on f |

Details that are easy to get wrong:

* **TRUE and FALSE** are ordinary 16-bit tokens. Any non-zero value counts as
  TRUE. Deciders emit exactly 1 or 0.
* **The deterministic merge consumes all three inputs** and forwards only the
  selected one. The unselected token is discarded; it is not kept for a later
  firing. The Fibonacci graph depends on this (see below).
* **The non-deterministic merge** keeps both input registers open at all
  times after start. A token arriving on one input while the other is being
  sent is captured and goes out next. When both inputs are full, the input
  not served last goes first, so neither input can starve the other.
* **Arithmetic** wraps modulo 2^16. MUL returns the low 16 bits. DIV is signed
  and returns `16'hFFFF` for a zero divisor. Comparisons are signed. NOT
  returns `~a`, but like every operator of its class it waits for a token on
  `b` and consumes it.

## The Fibonacci graph

The graph computes the loop

    first = 0; second = 1;
    for i = 0 to n: tmp = first + second; first = second; second = tmp;

It has two halves. They are joined by a single arc, `s12`, which carries the
loop decision.

### Wiring

Each instance in `df_fibonacci` is one line of the graph's assembler listing.
A line names the operator, then its input arcs, then its output arcs:

| # | operator | inputs | outputs | role |
|---|---|---|---|---|
| 1 | ndmerge | s7, dadob | s1 | loop control: first FALSE, then the decisions |
| 2 | dmerge | s2 (T), dadoc (F), s1 (ctl) | s3 | index: initial value or incremented |
| 3 | ndmerge | dadod, s11 | s2 | incremented index (dadod fills the first T slot) |
| 4 | decider `>` | dadoa, s4 | s5 | n > i ? |
| 5 | copy | s3 | s4, s9 | |
| 6 | copy | s5 | s6, s8 | |
| 7 | branch | s9 (data), s8 (ctl) | s10 (T), pf (F) | continue, or leave with i on pf |
| 8 | copy | s6 | s7, s12 | decision to index loop and to right half |
| 9 | add | s10, dadoe | s11 | i + 1 |
| 10 | ndmerge | s17, dadof | s13 | operand "first" |
| 11 | ndmerge | dadog, s25 | s14 | operand "second" |
| 12 | ndmerge | dadoi, s22 | s23 | |
| 13 | ndmerge | dadoj, s19 | s21 | |
| 14 | copy | s18 | s19, s20 | |
| 15 | dmerge | s23 (T), dadoh (F), s12 (ctl) | s24 | gate: release the delayed sum while the loop runs |
| 16 | dmerge | s20 (T), s21 (F), s26 (ctl) | s22 | |
| 17 | copy | s24 | s25, s26 | |
| 18 | add | s13, s14 | s15 | tmp = first + second |
| 19 | copy | s15 | s16, s18 | |
| 20 | copy | s16 | s17, fibo | result out, and fed back as next "first" |

### How it runs

**Left half.** The first control token is FALSE (from `dadob`), so dmerge 2
emits the start index from `dadoc`. At the same time it discards the filler
token from `dadod`. The decider compares n (`dadoa`) with i. While n > i, the
branch sends i to the adder, and `i + 1` comes back through ndmerge 3 to the
TRUE side of dmerge 2. The TRUE decision returns through copy 8 and ndmerge 1
as the next control token. When i reaches n, the branch sends i out on `pf`
and the loop stops. On every firing the decider consumes `dadoa`, dmerge 2
consumes `dadoc` and adder 9 consumes `dadoe`. The environment therefore offers these as constant
sources, which present the same value again as soon as it is taken.

**Right half.** Adder 18 always adds the newest sum (fed back through copy 20
and ndmerge 10) to the sum before it. That older sum goes the long way round:
copy 19 → copy 14 → dmerge 16 → ndmerge 12 → dmerge 15 → copy 17 → ndmerge 11.
This path is what delays it by one step. Dmerge 15 lets a token through only
when a loop decision arrives on `s12`. Each TRUE decision therefore lets
exactly one more sum be formed. The final FALSE decision releases one token
of the constant `dadoh` instead of a sum. The adder then forms one last sum
and the graph runs dry. Dmerge 16 is steered by the previous delayed value.
That value is never zero in this sequence, so dmerge 16 always takes its TRUE
side. Its FALSE side (`s21`, fed by copy 14 and the optional `dadoj`) is read
and discarded on every firing.

### Driving it

For one run with argument n, reset the graph and then pulse `start`. Offer:

| input | tokens |
|---|---|
| `dadoa` | n, constant source |
| `dadob` | one token: 0 (FALSE) |
| `dadoc` | 0, constant source |
| `dadod` | one token, any value (discarded) |
| `dadoe` | 1, constant source |
| `dadof` | one token: 0 (first) |
| `dadog` | one token: 1 (second) |
| `dadoh` | any value H, constant source |
| `dadoi` | one token: 1 |
| `dadoj` | optional, any value (never selected) |

Outputs:

* `pf` carries one token: n.
* `fibo` carries the n + 1 values of `tmp`, in order (1, 2, 3, 5, 8, ...),
  then one extra token, `tmp_last + H`, caused by the final FALSE decision.
  The useful result for argument n is the (n + 1)-th token. With 16-bit arcs
  it is exact up to n = 22 (46368).

The initial tokens must be on their arcs before tokens fed back from inside
the graph arrive. `dadog` in particular meets a fed-back operand in ndmerge
11. If it arrives late, the two swap order and the sequence is wrong. This is
inherent in using a non-deterministic merge to inject initial values. The
testbench demonstrates the safe case: all initial tokens are queued before
`start`.

With an environment that never stalls, one turn of the index loop takes 21
cycles, and `pf` leaves 18 + 21·n cycles after `start`. The testbench checks
this figure.

## Where this RTL departs from, or adds to, the original description

The operator architecture follows the source closely: input registers with
status bits, an output register with a strobe, the ready/busy meaning of
`ack`, the four-state controller, the 16-bit buses, the operator set, and the
Fibonacci graph arc for arc. The following are choices of this design:

* **Acknowledge polarity.** The source describes `ack` = 0 as ready and 1 as
  busy, and its controller chart sets `ack` to 1 on receipt. One sentence
  instead says a 0 on `ack` acknowledges receipt. The ready/busy meaning was
  followed.
* **Reset and start.** Synchronous active-low reset. A shared `start` moves
  every operator out of S0 and opens its ports.
* **S2_WAIT** is a named state for the chart's "wait while ack = 1" loop. The
  chart's wait before receiving was dropped: the output register is always
  empty at that point. The chart's "Done" returns to S1, so an operator fires
  repeatedly.
* **Copy**: no architecture is given for one-input operators. It uses the same
  controller, and finishes only when both copies are taken.
* **Dmerge consumes all three inputs.** This follows the operator pictures
  and the firing rule, and makes the Fibonacci graph's token counts balance.
  One sentence in the source could be read as "read only the selected input".
* TRUE/FALSE encoding, signed comparisons and division, division by zero,
  the NOT operator consuming `b`, and the ndmerge tie rule.
* The roles of `dadob` to `dadoj` are derived from the graph. The source
  names only `dadoa` (n) and `fibo` (result).
* **Not built:** the graphs of the other benchmarks the source reports (max,
  dot product, vector sum, bubble sort, pop count). Only their names and
  resource counts are given. Their vector sizes, memory access and graphs are
  not. No host interface is described; the graph's arcs are top-level ports.

## Verification

Each testbench compares the DUT's outputs with values it computes itself. It
prints `TB_RESULT checks=N failures=M` and has a cycle watchdog. Sources insert
random gaps and sinks apply random back-pressure, so every handshake path is
exercised.

* `tb_df_primitive`: all seven operations, 200 operand pairs each, corner
  cases (zero divisor, negative division, wrap-around). Also checks the
  2-cycle result latency and the 4-cycle reopen time.
* `tb_df_decider`: all six comparisons over a small signed range, so equal
  operands occur often.
* `tb_df_copy`: receivers with different back-pressure. Also checks that no
  new token is taken while one copy is still pending.
* `tb_df_ndmerge`: two tagged streams. Checks that every token is delivered
  once with per-source order kept, and that service alternates under
  saturation.
* `tb_df_dmerge`, `tb_df_branch`: selection by zero, one and other non-zero
  control values, and that every input is consumed exactly once per firing.
* `tb_df_fibonacci`: the whole graph for n = 0..6, n = 22, a late optional
  `dadoj`, and six random n ≤ 22 under random gaps and back-pressure. Checks
  `pf` and every `fibo` token against a software run of the loop. It also
  counts that each mechanism occurred: back-pressure stalls, TRUE and FALSE
  dmerge selections, both branch outputs, and an ndmerge holding two tokens.

To simulate one, for example the top:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/df_pkg.sv tb/tb_df_fibonacci.sv --top-module tb_df_fibonacci
    ./obj_dir/Vtb_df_fibonacci

The other files are found through `-Irtl -Itb` by module name. The top has no
parameters. The bus width is `DATA_W` in `df_pkg`; the testbenches assume 16
bits.
