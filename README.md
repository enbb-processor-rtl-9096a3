# A numerical brain: arithmetic inside the network switches

This design lets a sequence of arithmetic operations run as a dataflow in the
interconnect. It does not move operands to a processor and back. Every switch of an
on-chip mesh network has small arithmetic units sitting in front of its output
channels. Operands travel as packets, most significant digit first, in a redundant
signed-digit code. Each operator is an *on-line* unit: it produces result digits
while the operand digits are still arriving. The result leaves the switch as a new
packet, which can be the operand of the next operation further along. The whole
network therefore evaluates a dataflow graph, and digits pipeline through it.

A front end places such a graph on the network. In the target application this is a
set of conventional cores running an event-driven (VHDL-like) simulation. The front
end does two things:

- It sends *configuration* packets, which reserve and program operators in chosen
  switches.
- It injects the operand packets.

When the first digit of a result reaches a network interface, that interface raises
an *event* for the result's signal, so the simulator can schedule the processes that
read it.

The RTL below is a 10 × 8 mesh of such switches. Each switch has 5 ports, 3 virtual
channels of 3 flits per input port, and 2 on-line add/subtract operators per output
port. The top has a network interface at every node.

## What follows the source and what is our own

These parts follow the architecture this design is based on:

- The switch organisation:
  - input physical-channel controllers with virtual-channel flit buffers;
  - routing logic and a crossbar;
  - a virtual-channel/arithmetic-channel allocator and a port allocator;
  - flit-by-flit interleaving on each output channel;
  - two on-line operators per output port, multiplexed onto the output channel with
    bypass traffic.
- The numbers: 3 virtual channels of 3 flits, 2 operators per port, and a 10 × 8
  mesh.
- Credit-based flow control.
- Configuring switches with control packets.
- Keeping operands stored in virtual channels.
- Raising an event on the first digit of a result.

These are our own choices, where the source leaves the details open:

- the flit and packet formats;
- X-Y routing;
- the digit code and the addition algorithm;
- the rule that binds operands to operators by tag;
- the allocation policies;
- one-flit-per-cycle links;
- a planar mesh instead of a 3-D one.

Left out:

- Floating-point and any on-line operation other than add/subtract. The source names
  "Fp/int" operators but gives no operation set or algorithm.
- The "shadow" flit buffers that would keep an operand copy for fan-out. How a kept
  copy is addressed and re-sent is not described.
- The stacked main memory and the front-end cores. Their place is taken by the
  per-node injection, ejection and event ports of `enbb_top`.

## Digits and the on-line adder (`online_adder`)

A digit is 2 bits in two's complement: `01` = +1, `00` = 0, `11` = −1 (`10` is never
produced). A packet's digits d1 d2 … dn stand for the fraction Σ dᵢ·2⁻ⁱ.

Addition is the classic carry-free scheme with one digit of look-ahead:

1. At position j the digit sum is pⱼ = xⱼ + yⱼ ∈ {−2…2}. It is split into pⱼ = 2tⱼ + wⱼ.
   - For |pⱼ| = 2: w = 0 and t = ±1.
   - For pⱼ = +1: (t, w) = (1, −1) if both next-position digits are ≥ 0, else (0, 1).
   - For pⱼ = −1: (t, w) = (0, −1) if both next-position digits are ≥ 0, else (−1, 1).
   - For pⱼ = 0: (t, w) = (0, 0).
2. The output digit is zⱼ = wⱼ + tⱼ₊₁. The look-ahead choice keeps zⱼ in {−1, 0, 1}.

The unit takes one digit pair per `step` and gives its first output digit 2 steps
later (on-line delay 2). Feeding n pairs, then 2 zero pairs, gives n + 1 output
digits z₀ z₁ … zₙ. Their value with weight 2⁻ʲ on zⱼ is x + y. Read as a fraction of
the same form as the inputs, the packet therefore holds **(x ± y)/2**, which cannot
overflow. Chained operations scale by 1/2 per level. The end-to-end testbench checks
this exactly.

## Packets and flits (`enbb_pkg`)

A flit is 20 bits: `{head, tail, vc[1:0], data[15:0]}`. The `vc` field is rewritten
at every hop to the downstream virtual channel allocated by the sender.

A head flit's data is `{ptype[1:0], dx[3:0], dy[3:0], tag[5:0]}`. Three packet types
exist:

| ptype | name | body | what the destination switch does |
|---|---|---|---|
| 0 | DATA | one digit per flit (in `data[1:0]`), last has `tail` | sends it to its local port: it leaves the network and raises an event with `tag` |
| 1 | OPERAND | same | keeps it in its virtual-channel buffer until an operator configured there asks for `tag` |
| 2 | CONFIG | flit 2 `{op, tag_a, tag_b}`, flit 3 (tail) = the result's head | programs a free operator |

A CONFIG packet's third flit is the complete head of the result packet: its
destination, its type (DATA for a final result, OPERAND for an intermediate one) and
its tag. The switch routes that head like any other. The output port it would leave
by selects the arithmetic channel whose operator is configured. The operator thus
sits exactly where the result leaves the switch, as in the source's example.

## The switch (`enbb_router`)

```
in port p ─► input_port (V vc_buffers) ─► per-VC state ─► crossbar ─► arith_channel q ─► out link q
                  ▲ credits                 IDLE/BYPASS/      (one line per    K operators + bypass
                                            OPERAND/CFG       input VC)        + vc_allocator
                                         route_unit,  tag matching    pc_allocator per q
```

Every input virtual channel runs a small state machine:

- **IDLE**: the head at the front of the buffer is decoded.
  - A packet for another switch, or a DATA packet for this one, becomes **BYPASS**.
  - A CONFIG packet becomes **CFG**. Its two remaining flits are absorbed and the
    chosen operator is programmed. At most one configuration is done per switch per
    cycle.
  - An OPERAND packet for this switch stays where it is. Each cycle the switch
    compares its tag with the `tag_a`/`tag_b` of every configured operator that has
    not yet bound that slot.
  - On a match (lowest port and operator first, slot A preferred), the head is
    consumed and the channel becomes **OPERAND**, bound to that slot. At most one
    binding is done per switch per cycle.
- **BYPASS**: flits go through the crossbar to the output link when the port
  allocator grants them. A head also needs a free downstream virtual channel; a body
  flit needs one credit.
- **OPERAND**: digit flits go through the crossbar into the bound operator's one-flit
  holding register whenever it is empty.

Each output port has one round-robin `pc_allocator` with P·V + K = 17 requesters:
the 15 input virtual channels and the K operators' result flits. It grants one flit
per cycle, which either goes onto the link or into an operator's holding register.

### Timing

A head flit spends one cycle being routed and granted inside the switch. The output
link is registered, so each hop costs two cycles. Body flits stream at one per cycle
per output link. Packets on different virtual channels interleave flit by flit.

Credits come back one cycle after the downstream buffer pops. A head can be
sent on a virtual channel only once its buffer downstream is empty again (see the
section on flow control below).

## Operators (`online_operator`, `arith_channel`)

An operator is configured with `{op, tag_a, tag_b, result head}`. It then waits
until both slots are bound.

A step happens in a cycle in which:

- both holding registers have a digit, or their operand's tail has already passed
  (then 0 is used for it);
- and the two-entry result queue has room.

Each step adds A and B (or A and −B) and pushes out one result flit. The result head
enters the queue at the first step. After both tails, two zero steps flush the
adder. The last digit carries the tail bit.

From configuration to the first result digit takes 3 + (arrival of the operand
digits) cycles. The unit test checks this: result head at cycle 3, first digit at
cycle 6 after the operands' first digits.

An operator is one-shot: it becomes free again once its tail flit has won the
output link.

The `arith_channel` of an output port does four things:

- It holds the K operators.
- It steers crossbar flits to an operator slot or to the bypass path.
- It gives a new configuration to its lowest free operator. Without a free operator,
  a CONFIG packet simply waits in its input buffer, which is the *operator-full
  stall*.
- It puts the granted flit into the output register.

A result head is given a free downstream virtual channel, exactly like a bypass
head.

## Flow control and deadlock (`vc_allocator`)

For each downstream virtual channel the allocator keeps a busy bit and a credit
counter.

A channel is handed to a new packet only when it is idle **and** all its credits
have come back, that is, when the downstream buffer is empty. This matters because
operands wait in buffers. Suppose a channel could be reused as soon as the previous
tail left. Then operand B of an operation could queue in the same buffer behind
packet A, which itself waits for an operator that needs B, and both would be stuck.
With empty-only reallocation, a waiting operand owns its buffer.

Deadlock is still possible at the level of the dataflow, and the design leaves it to
the front end. The testbench follows these rules:

1. Configure the operators of a graph before injecting its operands. Operands can
   still wait for a late configuration, and the testbench exercises that, but a
   graph whose operands fill all channels first can hang.
2. An operator consumes its two operands in lockstep. Do not inject them one after
   the other through the same network interface: the interface sends one packet at
   a time, and A would block while B never starts. Inject them from different
   nodes, or interleave them.
3. Make sure the result packets can drain. A DATA result is always taken by its
   destination's interface.

## Network interface and top (`network_interface`, `enbb_top`)

The network interface at each node works in both directions:

- **Injection**: it accepts flits from the front end (`inj_valid`/`inj_ready`, one
  packet at a time). A head is sent on a virtual channel allocated with the same
  rules as in a switch.
- **Ejection**: it takes every flit from the switch's local port at once, returning a
  credit at once. On the first digit flit of a packet it pulses `ev_valid` with that
  packet's `tag`; this is the signal event.

`enbb_top` places XN × YN = 10 × 8 switches in a mesh. Node n = y·XN + x sits at
(x, y), and y grows southward. The edge ports see no traffic and no credits.

| parameter | default | meaning |
|---|---|---|
| XN, YN | 10, 8 | mesh size |
| V | 3 | virtual channels per physical channel |
| DEPTH | 3 | flits per virtual-channel buffer |
| K | 2 | on-line operators per output port |

The widths are set in `enbb_pkg`:

- coordinates are 4 bits, so a mesh can be at most 16 × 16;
- tags are 6 bits;
- the payload is 16 bits.

## Testbenches

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each ends with a
line `TB_RESULT checks=N failures=M`.

The random references are computed independently in the testbench. For arithmetic,
this means integer values of digit strings.

`tb_enbb_top` runs the full default-size mesh through these phases:

1. The example of one operation between operands from distant nodes.
2. Operands that arrive before their configuration.
3. A chain of two operations (SUB, then ADD on its result).
4. A stall with all operators of one port busy.
5. 24 random operations, with events checked.

It counts how often each mechanism happens: operations, subtractions, chains,
operand waits, operator-full stalls, interleaved flits, back-pressure cycles and
events. It fails if any count is zero.

To simulate one testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl rtl/enbb_pkg.sv rtl/*.sv tb/tb_enbb_top.sv --top-module tb_enbb_top
./obj_dir/Vtb_enbb_top
```

The full mesh takes a few minutes to build and about 15 s to run.

## Known limits

- Fixed-point add/subtract only. There is no floating point, multiplication or
  division.
- Operators are one-shot. A loop body mapped once and reused for many iterations
  would need operators that re-arm themselves.
- An operand packet is consumed (destroyed) by the operator that reads it. There
  are no shadow buffers, so an operand can feed only one operator. Fan-out
  needs the front end to inject copies.
- A result addressed as OPERAND to an operator in the *same* switch that produced it
  is not supported. It would leave through the local port.
- Links are one flit wide, and there is no bit-serial link option.
- The mesh is planar (2-D), not 3-D.
