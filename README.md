# In-network accumulation on a mesh NoC

A convolution filter whose weights do not fit in one processing element (PE) has to be split
across several PEs. Each of them then produces only part of every output value, and the parts
must be added before the result is complete. On a plain network-on-chip (NoC) the parts travel to
one place as packets, are ejected, added and sent on again. That costs hops, ejections and
injections.

This design does the addition inside the routers instead. A partial sum (psum) travels from PE to
PE in a small "INA" packet. At every router on the way, a small adder adds the local PE's psum to
the one in the packet and sends the packet on. The packet is never ejected. The last router of
the chain hands the complete sum to its network interface. From there it joins an ordinary
gather packet that collects the results of a whole row of nodes on its way to the output.

The RTL here is a full, synthesizable 8×8 mesh:

- input-queued virtual-channel routers, each with the accumulation datapath and its controller;
- network interfaces;
- weight-stationary multiply-accumulate PEs.

## Sizes

| Quantity | Value | Where it is set |
|---|---|---|
| Mesh | 8 × 8 | `MESH_X`, `MESH_Y` in `ina_mesh` |
| Virtual channels per port | 2 | `NUM_VC` in `ina_pkg` |
| Buffer per VC | 4 flits | `BUF_DEPTH` |
| Flit | 128 data bits, plus 3 sideband bits | `FLIT_W` |
| Gather payload (one psum) | 32 bits | `PAYLOAD_W` |
| Router latency, uncontended | 4 cycles | pipeline |
| Link latency | 1 cycle | link register in `ina_mesh` |
| PE weight memory | 32 KB = 8192 words of 32 bits | `MEM_BYTES` in `pe` |
| PEs per router | 1 (2 and 4 supported) | `LANES` |

The 3 sideband bits are the flit type (head/body/tail/head-tail) and the VC number.

## The router

`ina_router` is a five-port router: Local, North, South, East and West. It is a wormhole router
with virtual channels. Packets are routed X first, then Y (`route_computation`). Flow control
uses credits: an upstream router sends a flit only while it holds a credit for the downstream
VC buffer.

A flit passes through four pipeline stages:

1. **BW (buffer write).** The flit is written into its VC FIFO (`vc_fifo`, inside `input_unit`).
2. **RC + VA.** The head flit computes its output port. It then competes for a free VC of that
   output (`vc_allocator`). The first request arbiters over the VC, the second over the
   requesting inputs. The output VC stays reserved until the tail flit has left.
3. **SA (switch allocation).** `switch_allocator` is separable, input first. Each input picks one
   ready VC, then each output picks one input, using round-robin arbiters (`rr_arbiter`). A VC
   is ready when it has a flit and a downstream credit.
4. **ST (switch traversal).** The flit crosses the `crossbar` into the output register.

A flit that enters with no contention therefore leaves on the output register 4 cycles later.
The testbench checks this.

## The accumulation block

The accumulation block (`ina_block` plus `ina_control`) sits beside the crossbar.

**Datapath.** Operand 1 comes from the local network interface. Operand 2 comes from a 4:1
multiplexer over the E/W/N/S input ports. A 32-bit adder sums them (one adder per lane). The sum
goes back to the output port the INA packet was routed to.

**Controller.** `ina_control` is a three-state FSM:

- **Acquire Operand 1.** Waits until the NI offers a valid INA operand, then latches it.
- **Acquire Operand 2.** Waits for an INA payload flit from a neighbour. If its tag matches the
  held operand, the flit becomes operand 2. A flit with another tag goes through the router
  unchanged. An external `flush` (Operand2_Invalid) drops the operand and returns to Acquire
  Operand 1.
- **Summation.** The sum replaces the payload of the passing flit in the ST stage. The FSM stays
  here until the flit has been sent (Result_Sent).

**Ordering.** The INA payload flit arrives from the neighbour before the local psum may be
ready. The input unit therefore holds it in its buffer until the FSM is in Acquire Operand 2.
Held flits back up through the credits. This is the "INA stall" the mesh counts.

## Departures from the paper

The paper's text and its control figure disagree on the operands:

- the text calls the neighbour's psum operand 1 and the local psum operand 2;
- the block diagram feeds the NI into Op1 and the port multiplexer into Op2.

The RTL follows the diagram. The adder is commutative, so only the order of the two waiting
states changes.

## Gather packets and the load signal

Nodes that are not part of an accumulation chain, and the last node of each chain, send their
results in gather packets. A gather packet has one head flit and up to 15 body flits. Each body
flit carries four 32-bit slots (`128 / 32`). With more than one PE per router, each node's slot
is `LANES` words wide.

The node configured as `gather_init` injects the packet empty. Every `gather_member` on the path
knows its slot. When the body flit holding that slot reaches the ST stage:

- `load_signal_generator` raises Load;
- `payload_generator` writes the node's psum (from the NI's payload register) into the slot.

If the local psum is not ready yet, the flit is held in its input buffer (a "load stall"). The
packet ends at the node given by `gather_dst`, and the host port there hands it out.

## Network interface and PE

**PE (`pe`).** Each PE is weight-stationary. It first takes `nweights` weights into its memory,
at one word per cycle. It then does one multiply-accumulate per cycle over each input vector of
the same length, and tags every psum with a running count. Arithmetic is 32-bit integer,
wrapping.

**Network interface (`network_interface`).** Its behaviour depends on the node's `role`:

- **`ROLE_INA_INIT`.** Sends each psum as a two-flit INA packet (head and payload) to `ina_dst`.
- **`ROLE_INA_MEMBER`.** Offers each psum to the accumulation block as operand 1.
- **`ROLE_NONE`.** Puts each psum into the gather payload register, if the node is a gather
  member.

An INA packet ejected at its destination also goes into the gather payload register, so the
complete sum continues in the gather packet. Other ejected packets leave on `host_valid`/`host_flit`.

## Configuration

Each node reads one `cfg_t` word from the top-level `cfg` array:

| Field | Meaning |
|---|---|
| `role` | NONE, INA_INIT or INA_MEMBER |
| `ina_dst_x/y` | Destination of the INA packet |
| `gather_init`, `gather_member` | Gather membership |
| `gather_grp` | Gather group tag |
| `gather_slot` | This node's slot in the gather packet |
| `gather_body` | Number of body flits in the gather packet |
| `gather_dst_x/y` | Destination of the gather packet |
| `nweights` | Filter words this PE holds |

Nothing in the mesh decides this mapping: a controller outside the mesh writes it per layer.

**Example.** Take a filter of `C·R·R` words split over `P` PEs along a column:

- the first node is INA_INIT;
- the next `P−1` nodes are INA_MEMBER, in route order;
- the sink node is where the INA packet ends;
- every node gets `nweights = C·R·R / P`.

Weights and input activations come in on the `w_*` and `a_*` streams of each node.

**Note on memory size.** The paper's layer tables give the number of PEs per filter as
`ceil(C·R·R·32 / M)`. The values printed there correspond to M = 32 Kbit. The memory size printed
beside them is 32 KB. The PE memory here is 32 KB (8192 words). The split is set only by
`nweights`, so either reading can be mapped.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. To build one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl \
    rtl/ina_pkg.sv tb/tb_ina_router.sv --top-module tb_ina_router
./obj_dir/Vtb_ina_router
```

The unit testbenches compare against reference models written in the testbench:

- random traffic for the FIFO, crossbar, allocators and input unit;
- exhaustive route checks;
- FSM walks through every printed transition;
- a router test with 4-cycle latency, random unicast traffic, INA hold, summation and other-tag
  pass-through, and gather load;
- NI and PE result checks, including the PE's one-MAC-per-cycle rate.

`tb_ina_mesh` runs the whole 8×8 mesh at its default parameters, in two layers:

- **Layer 1.** Accumulation chains of three PEs down each column, in two groups of rows. Each
  complete sum is gathered into a row-wide gather packet.
- **Layer 2.** Gather only.

Every psum leaving the mesh is compared with a reference computed from the same random weights
and activations. The test also counts INA injections, in-router sums, INA stalls, gather
injections, loads and load stalls, and fails if any of them never happened. Building it takes
about three minutes; it runs in about a second.

## Limits

- One INA flit carries at most four 32-bit lanes, so 8 PEs per router is not supported.
- The controller, the input/weight streaming units and the global buffer are outside this RTL.
  They appear only as top-level ports.
- Assertions on `rst_n` inside the router and NI make Verilator report the reset as both
  synchronous and asynchronous (SYNCASYNCNET). The assertions only use it to disable checking
  during reset.
