# A message-driven site array for matrix-vector products and PageRank

This is synthesizable SystemVerilog for a small reconfigurable accelerator in which **the data
carries its own program**. The chip is a grid of identical *sites*. Each site holds one
floating-point number and very little else. Every transfer is a 64-bit message that names an
operation, a destination site and an operand. It also carries, for later use, a *next*
operation and a *next* destination. A site that receives a message for itself executes it.
A site that receives a message for another site passes it on, right or down, one hop per
clock cycle. There is no instruction memory and no compiler-set routing: the host programs the
array only by sending messages, and sites can create new messages at run time.

A matrix-vector product is the main use. Each site keeps one matrix element. A vector element is
broadcast to a whole column at once. Every site multiplies and sends its product along its row
to an accumulator site at the row's end. PageRank, `PR' = (1-d)/N + d·H·PR`, is one such product
followed by a scale and an add, done by the same accumulator sites.

The design follows the architecture of Chowdhury and Rahman, "Accelerating PageRank Algorithmic
Tasks with a new Programmable Hardware Architecture". The message format, the ten opcodes, the
site's behaviour, the row/column organisation, the vertical bus and the 64 x 64 size come from
that description. The RTL and every detail the description leaves open are this
implementation's own. Section 7 lists them.

## 1. The message

| bits    | field      | meaning                                                    |
|---------|------------|------------------------------------------------------------|
| 3:0     | `op`       | opcode executed at the destination                         |
| 15:4    | `dest`     | destination site address                                   |
| 47:16   | `value`    | operand, IEEE-754 single precision                         |
| 51:48   | `nxt_op`   | opcode for a message the destination may generate later    |
| 63:52   | `nxt_dest` | destination for that generated message                     |

Bit 0 is the least significant bit of the 64-bit word. `0x00f44121999a0051` is therefore
`Prog` to site 5, value 10.1 (`0x4121999a`), next `A_ADD` to site 15. `msg_pkg::msg_t` is this
layout as a packed struct, and `make_msg()` builds one.

Site (r, c) has address `r * COLS + c`. The 12-bit address reaches exactly the 4096 sites of the
default 64 x 64 array.

## 2. The instruction set and what a site does

A site stores a value `V`, a next opcode `NOP` and a next destination `ND`. These are the
actions for a message `m` that reaches it:

| opcode | code | action |
|--------|------|--------|
| `Prog`   | 0001 | `V = m.value; NOP = m.nxt_op; ND = m.nxt_dest` |
| `UPDATE` | 1101 | `V = m.value` |
| `A_ADD` / `A_SUB` / `A_MUL` / `A_DIV` | 0100 / 0101 / 0010 / 0110 | `V = V (op) m.value` |
| `A_ADDS` / `A_SUBS` / `A_MULS` / `A_DIVS` | 0111 / 1000 / 1001 / 1010 | send `{op: NOP, dest: ND, value: V (op) m.value, nxt_op: m.nxt_op, nxt_dest: m.nxt_dest}`; `V` unchanged |

The `S` ("stream") variants are the key to the scheme. A site is programmed once with `Prog`,
which leaves it waiting with a destination and an opcode for its result. A later operand then
triggers the computation, and the result leaves as a new message that does something at the
next site. The second site treats the first one's output as an ordinary instruction.

Here is a worked example on one row of four sites, whose addresses are 0 to 3:

1. `Prog` puts 1.1, 1.2 and 1.3 into sites 0, 1 and 2. Their next opcodes are `A_ADD`, `A_ADD` and
   `UPDATE`, and all three point at site 3.
2. `A_MULS` with 1, 2 and 3 arrives at sites 0, 1 and 2 in the same cycle. The three sites emit
   `A_ADD 1.1`, `A_ADD 2.4` and `UPDATE 3.9`, all addressed to site 3.
3. The messages move right one site per cycle. Site 3 therefore receives `UPDATE 3.9` first
   (one hop), then `A_ADD 2.4`, then `A_ADD 1.1`, and ends with 7.4.

The order in which the products arrive depends on distance. This is why the column next to the
accumulator gets `UPDATE` (which overwrites) and the others get `A_ADD`. No separate clearing
step is needed.

Division and subtraction use the stored value as the left operand. Unused opcodes are ignored. A
site whose next opcode is still `NOP` (after reset, or never programmed) generates nothing.
Because of this, a column-wide broadcast does not make unused sites emit messages.

## 3. Routing, the vertical bus and collisions (`site_decoder`)

Each cycle a site can receive a message from the left, one from the top and one from its
column's vertical bus. It can also generate one message of its own. The decoder sorts them:

* a **bus** message is always for this site. The bus is a broadcast to every site of the
  column, so one vector element reaches all rows in a single cycle;
* a left or top message whose `dest` equals the site's address is **executed** here;
* any other message goes **down** if its destination row is below this one, and **right**
  otherwise. The generated message follows the same rule. If it is addressed to its own site,
  it goes right.

Messages therefore reach any site to the right of or below the point where they enter. A message
for a site behind it leaves the array at the right edge. This is how results are offloaded: an
accumulator's next destination is the first site of its own row, so its streamed result runs
out of the right edge to the host.

Outputs are registered, so one hop costs one clock. The array has no back-pressure. When two
messages want the same output, or two want to be executed in the same cycle, fixed priorities
decide:

| place | priority |
|-------|----------|
| execute here | bus > left > top |
| right port   | left > top > generated |
| down port    | top > left > generated |

The loser is dropped, and `collision` is raised for one cycle. The array relies on the host
scheduling its traffic so that this never happens. The matrix-vector schedule below is
collision-free by construction, and the flag exists to make a bad schedule visible.

## 4. Matrix-vector product and PageRank on the array

For an N x M matrix, sites (r, 0..M-1) hold row r and site (r, M) is that row's accumulator. The
host (see `tb/fabric_host.sv`) proceeds as follows:

1. **Load.** In each of N cycles, one matrix row enters at the top of every column, last row
   first. Each element is a `Prog` that carries its next opcode (`UPDATE` for column M-1,
   `A_ADD` otherwise) and next destination (r, M). Column M receives `Prog` messages that give
   each accumulator the next opcode `UPDATE` and the next destination (r, 0). Row r's message
   enters N-1-r cycles after the first and needs r hops, so **all rows arrive in the same
   cycle**, N cycles after the load starts.
2. **Multiply.** The host broadcasts `A_MULS b[c]` on the bus of every column c < M in one cycle.
3. **Accumulate.** The products move right. The accumulator takes one per cycle, nearest column
   first, so this step takes M cycles.
4. **Scale and offset** (PageRank only). The host broadcasts `A_MUL d` on the accumulator
   column, then `A_ADDS (1-d)/N`. The second message makes every accumulator stream its result,
   which then leaves through the right edge.

For a plain product, use d = 1 and offset 0. Streaming does not overwrite the stored matrix
element, so the next PageRank iteration starts at step 2 with the previous results as the vector.

**Cycle count.** Count clock edges from the edge that takes the first load message to the edge
at which the host takes the last result from the right edge. An iteration that includes the load
takes `N + M + 4 + (COLS-1-M) = N + COLS + 3` edges. A further iteration, with the matrix still
in place, takes `COLS + 3`. The testbenches check both numbers exactly.

The original description counts the addition as one time step, which gives N + 3 for a product
and N + 6 for a PageRank iteration. In this RTL, as in the step-by-step example of section 2,
the accumulator adds one product per cycle. This costs M cycles rather than 1.

**Sizes.** A 64 x 64 array holds one tile of up to 64 rows x 63 matrix columns. Larger graphs
have to be cut into tiles by the host. For example, the 5000-protein case has 25e6 matrix entries,
which is about 6104 tiles of 4096 sites per iteration. The host also has to merge the partial
sums. The estimate from the original description (70 steps per tile, 213.6 ms for 100
iterations at 200 MHz) corresponds to about 131 cycles per tile here, or about 400 ms, if the
host could keep up. The tiling and merging host is not part of this RTL.

## 5. Files

| file | contents |
|------|----------|
| `rtl/msg_pkg.sv` | message struct, opcodes, address and value types, `make_msg` |
| `rtl/fpu.sv` | combinational single-precision add, subtract, multiply, divide |
| `rtl/site_decoder.sv` | routing and arbitration of one site (combinational) |
| `rtl/site_o.sv` | one site: decoder, FPU, value and next-field registers, registered outputs |
| `rtl/site_fabric.sv` | **top**: `ROWS x COLS` array, edge ports, vertical buses |
| `tb/fp_ref_pkg.sv` | double to single rounding reference, random operands |
| `tb/fabric_host.sv` | behavioural host: clock, reset, load, broadcast, result monitor |
| `tb/*_tb.sv` | self-checking testbenches, one per module, plus `pagerank_tb` |

Top-level ports of `site_fabric` (all message ports are `msg_t`, 64 bits):
`clk` and `rst` (synchronous, active high); `top_in_valid/msg[COLS]`, `left_in_valid/msg[ROWS]`
and `bus_valid/msg[COLS]` as inputs; `right_out_valid/msg[ROWS]`,
`bottom_out_valid/msg[COLS]` and `collision` as outputs. A valid strobe qualifies its message for
one cycle.

The site's port names (`WriteToLeft`, `LeftMessage`, `WriteToTop`, `TopMessage`,
`WriteToRight`, `RightMessage`, `WriteToDown`, `DownMessage`, `Clock`, `Reset`) are those of
the original single-site test. `BusWrite`/`BusMessage` and `Collision` are added.

## 6. Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and has a watchdog. For example, with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/msg_pkg.sv tb/fp_ref_pkg.sv \
  rtl/fpu.sv rtl/site_decoder.sv rtl/site_o.sv rtl/site_fabric.sv tb/fabric_host.sv \
  tb/site_fabric_tb.sv --top-module site_fabric_tb -o sim && obj_dir/sim
```

| testbench | what it checks |
|-----------|----------------|
| `fpu_tb` | the example products and sum (1.1, 2.4, 3.9, 7.4), special cases, 6000 random operations against double precision rounded to single |
| `site_decoder_tb` | 5000 random mixes of left, top, bus and generated messages against a reference router |
| `site_o_tb` | the original single-site experiment: site 5 decodes `0x00f44121999a0051` and passes the five `Prog`-to-9 messages down unchanged, in order, one cycle later; every opcode; the `A_MULS` to `UPDATE 3.9` example; collision; reset |
| `site_fabric_tb` | 6 x 6 array: the 4x3 matrix-vector example (result 0.25, 0, 0.165, 0.25); 3 iterations of the 4-node PageRank example with d = 0.85; left-edge injection, bottom exit, collision; both cycle counts; every mechanism must occur |
| `pagerank_tb` | 12 x 12 array: PageRank on a random 11-node graph, bit-exact against single-precision arithmetic in the array's order, checked against double precision, ranks summing to 1, and the cycle counts |

The testbenches compute expected values with the simulator's double arithmetic, rounded once to
single precision. For +, -, x and / this gives the correctly rounded single-precision result, so
it is independent of the design's FPU.

**Simulation size.** Verilator flattens the array and compiles every site's FPU separately.
Build time grows with the number of sites: a 16 x 16 array (256 sites) takes about 8 minutes to
build. The largest array simulated is 16 x 16, running `pagerank_tb` with `ROWS = COLS = 16`
and `N = 15`. The default 64 x 64 array passes lint and elaboration, but it has not been
simulated. The matrix-vector and PageRank behaviour does not depend on the array size beyond the
`COLS` term in the cycle count.

## 7. Choices not fixed by the original description

* **Number format and FPU.** IEEE-754 single precision, round to nearest even, subnormals flushed
  to zero, overflow to infinity, and quiet NaN for invalid operations. The FPU is a simple
  combinational unit, registered by the site, so each instruction takes one cycle.
* **Address numbering** is `row * COLS + col`. In the original single-site test, site 5 has
  neighbours 4 (left), 6 (right) and 9 (below), which this numbering gives with 4 columns. That
  test also names 2 as the site above, where this numbering gives 1.
* **No ring.** The message-passing analogy in the description is circular. The array drawings,
  however, show messages leaving at the right edge, and that is what is built. The left-edge
  inputs and bottom-edge outputs are added so that every edge link is connected.
* **Collisions** are resolved by fixed priority, with a drop and a flag (section 3). The
  description does not discuss them.
* **Streaming keeps the stored value**, and the generated message copies the incoming message's
  next fields into its own. A site with next opcode `NOP` emits nothing.
* **The vertical bus** is a one-cycle broadcast driven from outside the array.
* **The worked example's final value** is given as 7.9 in one place and 7.4 in another. The RTL
  produces 7.4, which equals 3.9 + 2.4 + 1.1.
* **Addition takes M cycles, not 1** (section 4). The matrix also stays loaded between
  iterations, so only the first iteration pays the N-cycle load.
* **Not modelled:** the host software, the tiling of graphs larger than the array, and the
  physical implementation. The per-site figures quoted for a 28 nm process (about 98 000 gates,
  4.1 mW, 200 MHz) are not reproduced here.
