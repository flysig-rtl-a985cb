# FLYSIG: a configurable dataflow processor built from bit-serial, delay-insensitive operators

FLYSIG is meant for prototyping fixed, periodic signal-processing algorithms such as
digital filters. A conventional prototype maps a gate-level netlist onto FPGAs. FLYSIG
works more like an FPGA whose logic blocks have been replaced by arithmetic and control
*operators*. An algorithm's dataflow graph is mapped node by node onto those operators. The
wiring between them is set by loading a configuration, so no gate-level mapping,
partitioning or timing closure is needed. Once a prototype works, a fixed "target" chip
can be derived from it. The derivation drops the unused operators and hard-wires the
configuration. The operators and the dataflow stay the same, so the prototype's timing
predicts the target's.

The operators are bit-serial: a number travels least significant bit first, one bit per
token. They are delay-insensitive: every bit is sent as a dual-rail code with a four-phase
acknowledge, so a stage moves on when its data has arrived, not when a clock says so.
Operators form rings, and a ring runs as fast as its tokens and free places ("bubbles")
allow. Deep bit-serial pipelines therefore reach the same throughput for small and large
graphs.

This repository holds synthesizable SystemVerilog for the operator library and for a
prototype processor built from it, with self-checking testbenches for every part. The
architecture, the operators and their netlists follow the FLYSIG paper by W. Hardt and B.
Kleinjohann (C-LAB Paderborn). That paper describes the processor-level blocks only by
their role. Their circuits, the sizes and the host interface are this design's own. The
section "Departures and open points" below lists them.

## 1. Signalling: dual-rail bits, four-phase channels, and the emulation clock

Every bit is a `dr_t` (see `flysig_pkg`), which is two wires `{t, f}`:

| t f | meaning |
|-----|---------|
| 0 0 | null (spacer, "no data") |
| 1 0 | logic 1 |
| 0 1 | logic 0 |
| 1 1 | illegal |

A *channel* is one `dr_t` carried forward plus one acknowledge wire carried back. Each
transfer runs through four phases:

1. The producer puts a valid code on the channel.
2. The consumer raises ack.
3. The producer returns to null.
4. The consumer lowers ack.

Then the next bit may come. A multi-bit number is a stream of such transfers, LSB first.
Nothing marks where one word ends. An adder's carry simply carries on into the next bit
of the stream, so back-to-back words behave like one long number (see section 7).

**How a clockless circuit becomes synchronous RTL.** The original circuits are built from
Muller C-gates. A C-gate's output rises when all of its inputs are 1, falls when all of
them are 0, and otherwise holds. C-gate circuits contain feedback loops, and those loops
cannot be simulated or synthesized as ordinary logic. In this RTL every C-gate state is a
flip-flop clocked by a free-running clock `clk`, and all other gates are combinational.
This gives each C-gate one clock of delay and every other gate zero delay. A
delay-insensitive circuit must work for *any* gate delays, so this is one legal timing
of the original circuit. It is not a new behaviour. It also removes every combinational
loop. The clock frequency never changes the result, only the wall-clock speed.

Because of this:

* latency and throughput are counted in clocks, and one clock stands for one C-gate
  transition.
* A token passes an empty register element in one clock.
* One four-phase transfer through a pipeline stage takes roughly four to six clocks,
  depending on the neighbours.

`c_element` is the N-input C-gate. The package function `c_gate(a, b, q)` is the next
state of a two-input C-gate, used inline in the operators.

## 2. The operator library

### Basic register element (`di_reg`) and queues (`di_shiftreg`)
A register element is a half-buffer. Each output rail is a C-gate of the matching input
rail and the *inverted* downstream ack. The upstream ack is `t | f` of the stored code. So
an element holds either one bit or null. It takes a new bit only after the stage behind it
has taken the previous one and gone back to null.

The paper needs three variants: uninitialized, 0-initialized and 1-initialized. Here they
are one module whose reset content comes from `init_val`. An initialized element holds a
token when the circuit starts. Putting such a token into a stream shifts the stream by
one bit, which multiplies it by two. This is how FLYSIG builds cheap constant multiplies
(section 5).

`di_shiftreg` chains `DEPTH` elements and can initialize any of them
(`INIT_VALID`/`INIT_VALUE`). A half-buffer queue holds at most one token per two elements.
The rule "one extra empty element per stored bit" is what keeps it running at full speed.

### Add operator (`dr_add`)
This is a stateless dual-rail full-adder cell. It is built like a textbook full adder,
from two half adders and an OR:

```
x1 = a XOR b      s  = x1 XOR c      co = (a AND b) OR (x1 AND c)
```

Every gate is the dual-rail version of that gate. Each output rail is a monotonic function
of the input rails, so all-null inputs give null outputs. For example, dual-rail AND has
`t = a.t & b.t` and `f = a.f | b.f`. The sum is valid only once all three inputs are
valid. The carry may become valid early when it is already decided, for example when
`a = b = 1`.

### Bit-serial full adder (`di_full_adder`)
```
 a --[e e]--\                /--[e e]--> sum
             +--( dr_add )--+
 b --[e e]--/     ^   c      \--carry--[e][e][e][0]--\
                  |                                   |
                  \-----------------------------------/
        C-gate( sum-queue ack, carry-ring ack, any input valid ) -> ack of a, b, carry
```
* Each operand passes two empty elements before the cell, and the sum leaves through two
  more.
* The carry circulates in a ring of four elements. The element next to the cell holds a 0
  at reset, so the first bit is added with carry 0.
* A single C-gate acknowledges the three cell inputs together. It rises when both the sum
  queue and the carry ring have taken their bits.
* It falls only when those queues are released *and* all three cell inputs are back to
  null.

The third term matters. The dual-rail XOR reports null as soon as *one* input is null.
Without that term, a fast operand could present its next bit while a slow one still held
the old bit, and the two would be added together.

### Control operators
* **`rselect` (read select).** A token on the select input `s` picks the input the next
  value is read from: `a` (true) or `b` (false). That value is passed to `y`. The other
  input is not touched and keeps its token for a later read.
  * Data path: four C-gates pair a select rail with a data rail, and two ORs merge them
    into `y`.
  * Acknowledges: `a_ack = C(y_ack, s.t)`, `b_ack = C(y_ack, s.f)` and
    `s_ack = a_ack | b_ack`. Because `y` returns to null only when both `s` and the chosen
    input have, the acknowledges fall only after a complete return to zero.
* **`wselect` (write select).** This is the mirror image. The data token `d` goes to `y1`
  when `s` is 1 and to `y0` when `s` is 0. Each output rail is `C(select rail, data rail)`.
  The shared input ack is the OR of the two output acks, because only the written output
  ever acknowledges.
* **`di_fork` and `di_join`.** These are the classic multi-ring operators.
  * A fork copies a channel to N consumers and acknowledges through a C-gate over their
    acks. So it waits for the slowest consumer in both directions.
  * A join shows an N-bit bundle only when every input holds a token.

RSELECT and WSELECT let one ring pass data to another under data-dependent control. This
is how FLYSIG expresses if/else in a dataflow graph: write each value to one of two
branches, then read it back from the matching branch.

## 3. The prototype processor (`flysig_processor`)

```
            host register bus                                       
                   |                                                 
        config_status_control --- scheduling: cell init / op id / guard flags, run
                   |
   +--> local_memory (64 cells) --> token_evaluation --> routing (crossbar)
   |                                                       |
   |                 +-------------------------------------+---------------+
   |                 v                 v                   v               v
   |       operation_component    io_port (host)   adda_port (D/A)   ...  inputs
   |       26 adders, 2 rselect,  tx/rx words      A/D samples
   |       2 wselect
   |                 |                 |                   |      ext_in (neighbour)
   |                 v                 v                   v            |
   |              distributor  <-------+-------------------+------------+
   |                 |  \----> ext_out (neighbour)
   +---- guard_evaluation (fork to every flagged destination)
```

The memory and the operators form one closed ring. A result goes back into memory cells,
and from there it becomes the operand of the next operation.

* **`local_memory`.** 64 *cells*, each a two-element queue. While the processor is
  stopped, the output element of each cell is loaded with a configured initial token
  (empty, 0 or 1). Initial operands and shift tokens are placed this way.
* **`token_evaluation`.** For each cell it tells whether the cell holds a valid token
  (`t | f`) and flags the illegal code. It then forms a *token*: the cell's operation id,
  its enable, the valid flag and the data (`token_t` in the package). Cells that are not
  enabled pass only null.
* **`routing`.** An associatively controlled crossbar. Every operator input port takes
  the enabled cell whose operation id equals the port number, and returns that port's ack
  to the cell. If two enabled cells name the same port, `conflict` is raised.
* **`operation_component`.** The operators. The two ports sit beside it:
  * `io_port` moves words between the host and the fabric.
  * `adda_port` moves samples between the external converters and the fabric. A D/A
    converter that is not ready stalls the fabric.
* **`distributor`.** Gathers every *result source* into one list: the operator results,
  the two port streams and the input links from a neighbouring processor. It drives every
  *destination*, which is a memory cell or an output link to a neighbour, from the source
  that is flagged for it.
* **`guard_evaluation`.** Holds one guard-flag mask per source, with one bit per
  destination that needs the result. A source is acknowledged through a C-gate over all of
  its flagged destinations, which is a fork. A source with no flag set is acknowledged
  straight away, so its tokens are dropped.
* **`config_status_control`.** The host interface, described in section 4.

Several processors can be chained: `ext_out` of one processor feeds `ext_in` of the next,
so a graph can be spread over several chips. `tb_flysig_network` connects a hard-wired
target (section 6) to a prototype in this way. The target computes `3x` from its A/D samples
and sends the result over the link. The prototype adds host words and drives its D/A port.
While the prototype is stopped, the link simply stalls.

### Numbering at the default size
Input ports, which are the values a cell's operation id can name:

| ports | meaning |
|------:|---------|
| 2k, 2k+1 (k = 0..25) | adder k, operands a and b |
| 52+3j, 53+3j, 54+3j (j = 0..1) | rselect j: S, A (true), B (false) |
| 58+2j, 59+2j (j = 0..1) | wselect j: S, D |
| 62 | I/O port (fabric to host) |
| 63 | D/A port |

Result sources, which index the guard-flag masks:

| sources | meaning |
|--------:|---------|
| 0..25 | adder sums |
| 26, 27 | rselect Y |
| 28+2j, 29+2j | wselect j: Y(true), Y(false) |
| 32 | I/O port (host to fabric) |
| 33 | A/D port |
| 34, 35 | input links `ext_in[0..1]` |

Destinations, which are bit positions in a guard mask: 0..63 are cells, and 64 and 65 are
the output links `ext_out[0..1]`. The general formulas are `n_op_in()` and `n_op_out()` in
`flysig_pkg`.

## 4. Programming the processor

The host uses a synchronous word-addressed bus: `addr[15:0]`, `wdata[31:0]`, `we`, and a
combinational `rdata`.

| address | access | content |
|---------|--------|---------|
| 0x0000 | rw | bit 0 `run`. While 0, the whole fabric is held in reset and the cells take their initial tokens |
| 0x0001 | r | bit 0 I/O tx ready, bit 1 I/O rx word valid, bit 2 illegal code seen (sticky), bit 3 routing conflict |
| 0x0002 | w | word to send into the fabric (ignored unless tx ready) |
| 0x0003 | r/w | read: received word; write: release it |
| 0x1000+c | rw | cell c: [1:0] initial token (0 empty, 1 zero, 2 one), [2] enable, [15:8] operation id |
| 0x2000+8s+w | rw | guard flags of source s, destinations 32w..32w+31 |
| 0x3000+w | r | valid flags of cells 32w..32w+31 |

A program is loaded in three steps:

1. Write the cells and guard masks.
2. Set `run`.
3. Feed data through the I/O port, the A/D port or the links.

Every edge of the dataflow graph becomes a pair: the guard bit of the producing source
selects a cell, and that cell's operation id names the consuming port. Stopping (`run` =
0) discards every token in flight and reloads the initial tokens.

Example, as used in `tb_flysig_processor`. To compute `y = a + b`, with `a` from the A/D
converter, `b` from the host and `y` to the D/A converter:

```
cell 0: id 0 (adder0.a), enabled     guard(A/D src 33)   = {cell 0}
cell 1: id 1 (adder0.b), enabled     guard(I/O src 32)   = {cell 1}
cell 2: id 63 (D/A),     enabled     guard(adder0 src 0) = {cell 2}
```

## 5. Constant multiples by initial tokens

An initialized register element in a stream puts one extra bit in front of the stream,
which doubles its value. The paper's example is `x' = a + x + x + x`. A direct mapping
needs three adders. The cheaper mapping needs two adders: it adds `a + x` and then adds
`2x`. The `2x` term is a copy of `x` that passes one 0-initialized element. The end-to-end
test does the same inside the processor. An input link is forked to cell 3 (initial token
0) and cell 4 (empty), and adder 1 adds them. The output link then carries `3X`.

`tb_triple_feedback` builds the full example from the operators, both ways, as a
recurrence. The result `x` is fed back through a queue that holds four 0 tokens, so the
fed-back stream is `16x`. The output stream must then satisfy `X = A + 48X` (mod 2^n).
Both versions give this result bit for bit, and they agree with each other.

The feedback queue needs care. The paper draws four adjacent 0-initialized elements, but
four tokens side by side in half-buffer elements cannot move: no element can return to
null while the one behind it still holds a token. So the queue here has eight elements,
with an empty element in front of each 0 token. This is the same "one empty element per
stored bit" rule as in section 2.

In that test the three-adder version needs about 7 clocks per bit and the two-adder
version about 8.5. The shorter version has less slack in its loop, so saving an adder
costs some throughput here.

## 6. The target version (`flysig_target`)

Once an algorithm runs on the prototype, the fixed chip for it keeps the same operators and
the same dataflow. Only two things change:

* the schedule is built in rather than loaded;
* operators the algorithm does not use are left out.

`flysig_target` is exactly that. It instantiates the same memory, token evaluation, routing,
operator, port, distributor and guard blocks. The configuration comes from parameters:

* `CELL_INIT[2c+1:2c]`: cell c's initial token;
* `CELL_EN[c]`: cell c's enable;
* `CELL_OP[8c+7:8c]`: cell c's operation id;
* `GUARD[s*N_DST+d]`: whether source s feeds destination d.

With constant configuration, synthesis removes the crossbar and the guard logic that is not
used. The operator counts `N_ADD`, `N_RSEL` and `N_WSEL` are set to what the algorithm needs,
and they may be 0. The numbering rules are the same as in section 3, applied to these counts.

There is no host bus and no run bit. The fabric starts from its initial tokens when `rst_n`
is released. The I/O port's word handshakes and the status signals (`valid_flags`,
`illegal`, `conflict`) are brought out as plain ports.

The default program is `y = 3x` from the A/D to the D/A port:

* one adder and four cells;
* the samples are forked to both adder inputs;
* one copy starts behind a 0 token, which doubles it.

`tb_flysig_target` runs this program. It also runs a second instance whose parameters send
the A/D stream out through an output link, back in through an input link, and on to the
D/A port.

## 7. Departures and open points

* **Clocked emulation.** All C-gates are flip-flops of a common clock (section 1). The
  logic follows the paper's netlists. Absolute times, such as the paper's reported latency
  and throughput in nanoseconds, depend on transistor-level gate delays and cannot be
  reproduced here.
* **No word framing.** The paper does not say how words are separated in a stream. Carries
  are cleared only by reset, so consecutive words on one stream add like the digits of one
  long number. The tests check exactly that.
* **Processor-level circuits are this design's.** The paper describes these blocks by
  their role only:
  * memory cells, token evaluation, the associative crossbar (match on operation id), the
    distributor and guard evaluation (a destination mask per result source, plus a fork);
  * the port word formats and the register map.
  The token of the paper carries an operation id, valid flags and guard flags. Here the
  guard flags live with the result sources rather than in the cell, because a source's
  destinations are fixed by the schedule.
* **Sizes are chosen, not given.** 26 adders, 2 RSELECT, 2 WSELECT, 64 cells, 2 links,
  16-bit port words, 2-element cells. The paper only says the operator set is limited by
  chip size. 26 adders and 64 cells are enough for a 26-operation graph such as the fifth
  order elliptic filter, if every operation is an addition.
* **Not built:**
  * the asymmetric switch (only named);
  * floating-point and trigonometric operators, which the paper leaves for future work;
  * the PCI bus interface and the analog converters, which are outside the chip. The
    register bus and the sample handshakes are brought out as ports instead.
  * the DIMS style of the add operator, which the paper only shows for comparison.
* **Initial operands are single bits.** The configuration loads each cell with at most
  one token (empty, 0 or 1), because a cell holds one token. The paper also stores initial
  operands in memory. A multi-bit initial operand has to be sent in through the I/O port
  after `run` is set.
* **Operator to operator through a cell.** The paper lets an operator read its operands
  from memory or straight from the operator before it. Here every result passes through a
  memory cell, chosen by the guard flags, on its way to the next operator. The cell is a
  two-element queue, so a chain of operators still pipelines bit by bit. Each edge of the
  graph costs one cell.
* **Filter benchmarks.** The paper's filters range from 3 to 26 operations. Their netlists
  are not given, so no filter graph is included.

## 8. How far it can be trusted

What is checked:

* Every block has a self-checking testbench, and all of them pass.
* Each testbench has been run against a copy of its block with one deliberate bug, and
  each one caught the bug.
* Operands are random, and the channel models pause randomly before every handshake
  edge. So the operators are exercised under many different arrival orders, not one fixed
  schedule.
* The arithmetic is compared with integer models:
  * `a + b` for the adder, over 256-bit streams with long carry chains;
  * `3X` for the shift-and-add graphs;
  * the `x' = a + 3x` recurrence.
* The processor testbench runs two real programs at the default size (26 adders, 64
  cells) and counts that every routing mechanism actually happened.
* The whole design synthesizes. At the default size it is about 8.3k cells and 1.7k
  flip-flops, plus the configuration RAM. There are no latches and no combinational loops.

What is not checked:

* Delay-insensitivity is tested only under the clocked emulation: one clock per C-gate,
  with a random environment. The circuits were not analysed under arbitrary gate delays,
  for example for isochronic forks inside an operator.
* Only the default size and a few small sizes were simulated. Other operator mixes rely
  on the same generate code.
* The host register bus was tested only with the access patterns in
  `tb_config_status_control` and `tb_flysig_processor`.
* Nothing was compared with the timing of the original circuits.

## 9. Files

* `rtl/flysig_pkg.sv`: types (`dr_t`, `token_t`, `dr_init_e`), dual-rail gate
  functions, default sizes, and the port-count formulas.
* Primitives: `c_element`, `di_reg`, `di_shiftreg`, `dr_add`.
* Operators: `di_full_adder`, `rselect`, `wselect`, `di_fork`, `di_join`.
* Processor: `local_memory`, `token_evaluation`, `routing`, `operation_component`,
  `io_port`, `adda_port` (both use the helpers `dr_serializer` and `dr_deserializer`),
  `distributor`, `guard_evaluation`, `config_status_control`, `flysig_processor` (top),
  `flysig_target` (hard-wired version).
* `tb/`: a self-checking testbench for each block (`tb_<module>.sv`). `c_element`,
  `dr_serializer` and `dr_deserializer` are tested inside the blocks that use them. There
  are also the channel models `tb_dr_source` and `tb_dr_sink`. These models insert random pauses on every
  transition, so each block is tested under irregular timing, as a delay-insensitive
  circuit must be.
* `tb/tb_triple_feedback.sv`: the `x' = a + x + x + x` workload of section 5, with no
  block of its own.
* `tb/tb_flysig_network.sv`: a target and a prototype chained through a link (section 3).

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. Each also has a
watchdog, which counts a failure if the test hangs.

## 10. Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal rtl/flysig_pkg.sv -y rtl -y tb \
          tb/tb_flysig_processor.sv --top-module tb_flysig_processor
./obj_dir/Vtb_flysig_processor
```

Any other testbench runs the same way with its own name. `tb_flysig_processor` runs the
processor at its default size; building and running it takes well under a minute. It runs two programs:

* A/D + host words into an adder and out to the D/A port, plus the fork-and-shift `3X`
  graph and a dropped input link;
* a wselect/rselect split and merge, after stopping and reprogramming.

It stalls the D/A port and an output link, and it counts each mechanism: additions, the
initial-token shift, the fork, dropped tokens, both wselect outputs, both rselect inputs,
the stalls and the reprogramming. A mechanism that never happened counts as a failure.

To change the operator mix, override the parameters of `flysig_processor` (`N_ADD`,
`N_RSEL`, `N_WSEL`, `N_EXT`, `N_CELL`, `CELL_DEPTH`, `W`). The port numbering moves with
them as given by the package formulas. `OP_ID_W` (8 bits) limits a processor to 256
operator input ports.
