# An event-driven constraint solver: array of oscillating multi-valued nodes

This RTL describes a chip that searches for solutions of constraint satisfaction problems
(3-SAT, graph colouring) without a program or a central controller. Every problem variable
is a small state machine, a *node*, that owns a free-running oscillator. Once per oscillator
period the node announces its current value by emitting an event. An external router copies
the event to the nodes that share a constraint with it. Each copy carries a set of
*allowed* values. A node that receives a set keeps its value if the value is in the set.
Otherwise it jumps to the lowest allowed value. The oscillators all run at slightly different
rates, because the analog circuits are mismatched, so the order in which the nodes speak keeps
shifting. This gives a deterministic but effectively random local search. A state in which no
event contradicts any node is stable.

The design follows a published prototype: a 64 x 32 array of binary nodes in 180 nm CMOS,
with asynchronous AER (address-event representation) interfaces on three sides and an
FPGA that does the routing. The prototype is asynchronous and analog in parts. The RTL here
is a single-clock synchronous rendering of its digital behaviour. The oscillators are
behavioural models.

```
             +--------------------------- csp_system ---------------------------+
             |  +------------------------ csp_chip ------------------------+    |
 bias_i ---->|  | 2048 x if_oscillator --spike--> node_array (64 x 32)     |    |
             |  |                                  | req/port    ^ row/col |    |
             |  |                            aer_out_if      aer_in_if     |    |
             |  +----------------------------------|--------------^--------+    |
             |              12-bit output address  v              | 19-bit input address
             |                                  aer_router (lut + target memory)|
             +-------------------------------------------------------------------+
```

## The node rule

An n-valued variable has states 1..n and output ports 1..n. An input event carries a word
`i` of n bits. Bit p set means "state p is allowed".

* State update (f): if bit `s` of `i` is set, stay in state `s`. Otherwise go to the lowest
  `p` whose bit is set. A word with no bit set changes nothing.
* Emission (g): only the node's own oscillator (input port 0, internal) makes it emit. It
  emits on the output port equal to its current state. Routed input events never cause
  an emission directly.

So a route `source port -> (target variable, word)` expresses "when the source has value
*x*, the target may only take the values in *word*". The 'lowest allowed' rule breaks ties.
Choosing which states are numbered low is how a mapping encodes priorities.

## Merged variables and the carry chains

The array holds binary nodes only. Two, three or four neighbours in a row can be joined into
one 4-, 6- or 8-valued variable. Each node has a configuration bit `link`, which means "I
continue the variable of my left neighbour". Column 0 never links. A run of more than three
link bits is a configuration error, caught by an assertion in `node_array`.

Node j of a chain holds the two one-hot bits for states 2j+1 and 2j+2. Exactly one bit in
the whole chain is set. The input-port word is split two bits per node
(`word[2j +: 2]` to node j). The rule above then needs information from the whole chain,
which `csp_node` passes along combinational carries:

| carry | direction | meaning |
|---|---|---|
| `ev` | left to right | the event hit the base node of this chain |
| `seen` | left to right | some node to the left has an allowed bit |
| `keep` | both | the current state's bit is allowed somewhere in the chain |
| `any` | both | some bit in the chain is allowed |
| `osc` | left to right | the base node's oscillator fired |

A node changes its state bits when the event hits the chain, some bit is allowed and the
current state is not. It then takes the lowest allowed of its own two bits, or clears them
if a node further left is taking the new state (`seen`). For the oscillator, only the base
node's spike counts. It is forwarded along the chain, and the node whose state bit is set
raises the request, carrying its local port bit. Because `node_array` gates the right-going
carries with the link bit of the right neighbour, chains never leak into the next variable.

Worked example: a 4-valued variable in state 3 (node 1, bit 0) receives word `0b1001`.
Bit 3 is clear, so the state is not kept. Node 0 has allowed bit 0 (state 1), so node 0 sets
state 1 and node 1 sees `seen` and clears. With word `0b1100` the state is kept.

`state_init_i` puts every variable in state 1. Non-base nodes clear, and the base node sets
bit 0. After reset all bits are clear and a variable emits nothing until it is
initialised.

## Events on the wires

Output bus, 12 bits (`csp_pkg::out_addr_t`): `{row[5:0], col[4:0], port}`. This is the
address of the node that holds the emitting state bit, plus that node's local port bit.
Output port p of a variable based at column c is therefore node `c + (p-1)/2`, port bit
`(p-1) % 2`. Each of the 4096 node output ports has a distinct address, so the bus has
log2(K_out) = 12 lines, as on the prototype.

Input bus, 19 bits (`csp_pkg::in_addr_t`): `{row[5:0], col[4:0], word[7:0]}`. `col` is the
base column of the target variable and `word` is its input-port index. `aer_in_if` raises
the row line and the base-column line for one clock. It spreads `word` over the data lines
of columns col..col+3. An address with a zero word, or outside the array, is dropped and
counted (`drop_o`).

`aer_out_if` arbitrates among the nodes whose request is up. It is round robin over rows,
then round robin over the columns of the chosen row, with one column pointer per row. A
waiting node is served within ROWS x COLS transfers. The chosen node is acknowledged in the
cycle its address enters the output register, so one event can leave per clock.

Both buses use a valid/ready handshake. It stands in for the four-phase handshakes of the
asynchronous chip.

### Event loss

A node has one pending request. If its oscillator fires again before the request is served,
the new event replaces the old one (the old one is lost) and `lost_o` pulses. On the chip the
same situation delays or drops events. The simulated network of the original work found
this mildly helpful rather than harmful. The end-to-end tests count these losses but do not
require any.

## The router

`aer_router` stands for the off-chip FPGA. It has two memories:

* `lut[src]`, one entry per output address (4096): `{base, count}`.
* `tgt_mem[base .. base+count-1]`: the input addresses to send, up to 32768 in all.

After reset the router spends 4096 clocks clearing every count (`table_ready_o` low). An
unprogrammed source is then dropped. An event with fan-out F takes 1 + F clocks, and the
router holds the chip's output bus meanwhile (`stall_o` from the chip shows nodes waiting
behind it). The copies leave in table order. The table may be rewritten between problems.
Avoid changing an entry while its source is being sent.

## Oscillators and mismatch

`if_oscillator` is an integrate-and-fire accumulator. Every clock it adds
`bias * GAIN / 1024` and spikes when it reaches `VTH`, keeping the remainder. `csp_chip`
gives each of the 2048 instances a different `GAIN` in 844..1204 (about +/-18 % around
1024) and a random start phase, both from a fixed hash of the node index and `SEED`. The
prototype measured a mean of 210 Hz and a standard deviation of 22 Hz (about 10 %). The
spread here is uniform rather than Gaussian.

With `OSC_VTH = 2^20` and `bias_i = 100`, a node fires about once per 10.5k clocks. A chip
with every node active then produces about 0.2 events per clock. That load leaves room for
the router's serial fan-out of the 3-SAT mapping. Raise `bias_i` for faster but more
congested runs.

The bias generator (analog) and the pads are not modelled. `bias_i` is the common bias word.

## Mapping problems

### 3-SAT

This mapping is used by `tb_csp_system`.

* Each variable is one binary node. Port 1 means false, port 2 means true.
* Each clause is one 4-valued variable (two merged nodes). State 4 means "fulfilled".
  State k means "literal k spoke last and does not fulfil me".
* Variable port that makes literal k true -> clause word `1000`.
* Variable port that makes literal k false -> clause word `1000 | bit(k-1)`. Since state 4
  is allowed, this keeps a fulfilled clause fulfilled. Otherwise it moves the clause to
  state k.
* Clause port k (k = 1..3) -> the variable, with the word of the value that makes literal k
  true. The same event also goes as word `1000` to every other clause containing the same
  literal.
* Clause port 4 -> the clause itself, word `0100` (state 3). A clause must therefore be
  re-fulfilled within each of its own periods. If it is not, at the end of the period it
  flips the variable of the literal that last spoke against it.
* Clauses go on the slowest oscillators and variables on the fastest. The testbench measures
  the rates first, with an empty routing table.

Cost: N + 2M nodes and about 26.5 M router targets for M clauses (at clause/variable ratio
4.3). A 200-variable, 860-clause instance needs 1920 of the 2048 nodes and about 23k of the
32768 targets.

### Graph colouring with K = 4

This mapping is used by `tb_coloring`. Each vertex is two 4-valued variables, a *main* and a
*helper*.

* Port p of either one drives the other to state 5-p. The pair agrees when they are
  mirror images.
* Main port p (colour p) goes to every neighbour's main with word `1111 ^ bit(p-1)`, and to
  its helper with `1111 ^ bit(4-p)`.

A neighbour that holds the same colour therefore moves its main to the lowest other colour
and its helper to the mirror of colour 1. The two then settle through their coupling. This
couples each vertex's choice to its neighbours without a fixed preference for low colours.
The colour of a vertex is the port its main variable last emitted on. For more colours, use
6- or 8-valued variables and exclude the unused states in every word. That extension is this
design's, not the prototype's.

The obvious extension to K = 5 uses 6-valued variables, mirror state K+1-p and
K-bit masks. It was tried on the 5 x 5 queen graph, which has 25 vertices, 160 edges and
needs exactly 5 colours. Within 20 M clocks (about 1900 oscillator periods) it did not
reach a proper colouring. The prototype reports solving this graph, so its own 5-colour
arrangement is probably different. This mapping should be taken as unverified. Keep the
router load in mind with dense graphs: a main variable's event fans out to 1 + 2 x degree
copies. At bias 400 the queen graph would keep the serial router busy all the time.

## Where this RTL departs from the prototype

* Everything is synchronous to one clock. The chip's interfaces are asynchronous and its node
  logic is event-driven. Each action here takes whole clock cycles: an input word reaches the
  node one clock after it is accepted and changes the state one clock later. A spike raises
  the request on the next edge.
* The oscillators are digital accumulators with a uniform gain spread, not analog neurons.
* The input bus has 19 bits (row, column, 8-bit word), not the minimal log2(K_in). The
  chip's own input encoding is not published.
* Merging works within a row, left to right, with a per-node link bit. The chip's
  configuration mechanism is not published.
* Router table format, sizes (4096 sources, 32768 targets, fan-out up to 255) and timing are
  choices for this design.
* A waiting event that is overtaken by a newer one from the same node is replaced.
* Not built: the bias generator, the pads, and the software-only node types the original work
  uses for its probSAT-style 3-SAT network, its K-valued (K up to 11) colouring runs and its
  travelling-salesman network. Those run on different node rules than the chip's.

## Files

| file | content |
|---|---|
| `rtl/csp_pkg.sv` | sizes, address structs |
| `rtl/csp_node.sv` | one binary node: f/g rule, chain carries, request/ack |
| `rtl/node_array.sv` | 64 x 32 nodes, link configuration, read port |
| `rtl/if_oscillator.sv` | behavioural integrate-and-fire oscillator |
| `rtl/aer_out_if.sv` | request arbitration, output address bus |
| `rtl/aer_in_if.sv` | input address decoding to row/column lines |
| `rtl/csp_chip.sv` | the chip: oscillators, array, both interfaces |
| `rtl/aer_router.sv` | off-chip router with programmable table |
| `rtl/csp_system.sv` | top level: chip plus router, host ports |

Testbenches (each prints `TB_RESULT checks=N failures=M`, and each has a watchdog):

| testbench | what it checks |
|---|---|
| `tb_csp_node` | one node alone and inside a chain (random neighbour carries) against a reference f/g model (`tb/csp_ref_pkg.sv`); request timing and lost events |
| `tb_node_array` | 4 x 8 array, random links and words, every node's state against the model |
| `tb_if_oscillator` | exact spike counts, one-clock spikes, first-spike time, rate change with bias |
| `tb_aer_out_if` | every request served once, correct address, hold under back-pressure, fairness bound |
| `tb_aer_in_if` | word spreading, one-clock lines, drops |
| `tb_aer_router` | random table (256-entry target memory): targets in table order under random valid/ready, unprogrammed and zero fan-out sources dropped, 1+F clocks per event |
| `tb_csp_chip` | 4 x 8 chip with 2-, 4-, 6- and 8-valued variables: random input bursts against a reference model, every output word is the port of the current state, each variable speaks once per window, stall and lost events under a held bus |
| `tb_csp_system` | full size, no overrides: the two-clause example, then a random 20-variable, 85-clause 3-SAT instance; every routed event checked against the table; solution required |
| `tb_coloring` | 16 x 12 system: colours the 11-vertex Mycielski graph with 4 colours (solution required, then must stay fixed), then runs the 5 x 5 queen graph with 5 colours and reports the outcome; every routed event checked |

Running one with Verilator 5:

```
verilator --binary --timing --assert rtl/csp_pkg.sv rtl/*.sv tb/csp_ref_pkg.sv \
          tb/tb_node_array.sv --top-module tb_node_array -Mdir obj_na
obj_na/Vtb_node_array
```

The full-size system test builds in a few minutes (use `-O3`, or `--build-jobs`). It
simulates about 1.3 M clocks in a little over a minute. Most of that time goes to the
random instance. The node and array tests parameterise the array size, so a change to the
node logic can be tried at 4 x 8 first.
