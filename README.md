# A two-network mesh for attaching cores and accelerators

This design connects many compute tiles, and I/O blocks under the chip's south edge, with a 2-D mesh made of two separate networks. Requests (loads, stores, swaps) go on the **forward** network. Responses (load data or store credits) come back on the **reverse** network.

Nothing can deadlock, for three reasons:
- A response never waits on a request.
- A node never sends more requests than it holds **credits** for.
- Every node must always take the responses that come back to it.

Every tile and I/O block joins the mesh the same way. An **endpoint** turns the network links into two simple handshake ports:
- a slave port, which receives requests and answers them;
- a master port, which sends requests and gets their replies.

Any memory or master that speaks those handshakes can be attached without knowing how the network works.

The RTL is plain synthesizable SystemVerilog. The top, `bsg_manycore_mesh`, builds by default:
- a 16 × 16 array of tiles;
- a row of 16 I/O nodes under the south edge.

Each tile is a router pair plus an endpoint. The tile's processor is not included: its endpoint ports are brought out to the top, so a core, an accelerator or a testbench model can drive them.

## Coordinates and packets

- X grows eastward and Y grows southward. Tile (x, y) is at row y, column x.
- The I/O row sits at `y = num_tiles_y_p`, one row below the last tile row. For that reason the Y field is `clog2(ny+1)` bits wide (5 bits at 16 rows). The X field is `clog2(nx)` bits wide (4 bits).
- Addresses are word addresses, `addr_width_p` = 20 bits. Data words are 32 bits.

A **request** packet (`bsg_manycore_packet_s`, defined by macros in `bsg_manycore_packet.svh`) holds, from MSB to LSB:

| field | meaning |
|---|---|
| `addr` | word address at the destination; MSB = 1 selects the configuration registers |
| `op` | `00` load, `01` store, `10`/`11` swap |
| `op_ex` | byte mask for stores (4 bits) |
| `data` | store or swap data |
| `src_y_cord`, `src_x_cord` | where the response goes |
| `y_cord`, `x_cord` | destination |

A **response** packet (`bsg_manycore_return_packet_s`) holds:
- `pkt_type`: 0 = credit, 1 = data;
- `data`;
- the destination coordinates, which are the requester's coordinates.

A **link bundle** carries one direction of one side of a node. It has a forward channel (valid, data, and the ready for the opposite direction) and a reverse channel in the same form. In each channel, ready travels against data. Links join nodes as packed structs, so the top's ports are plain packed arrays.

## Routers

`bsg_mesh_router` is a five-port router with ports P (the local endpoint), W, E, N and S.

**Input buffering**
- Each input has a two-entry FIFO (`bsg_fifo_1r1w_small`).
- Outputs are not buffered.
- A packet that enters in cycle t can leave in cycle t+1, so one hop costs one cycle when nothing else is competing.
- A FIFO's `ready_o` means only "not full". It does not look at the consumer in the same cycle. This keeps combinational paths from running through chains of routers. The cost is that a full FIFO cannot accept and dequeue in the same cycle.

**Routing**
- Routing is dimension-ordered: a packet first moves along X until its column matches, then along Y, then leaves on P.
- The switch only builds the turns that X-then-Y routing needs:
  - No packet arriving from N may turn W or E.
  - No packet may make a U-turn.
- An assertion reports a packet that would need a missing turn.
- Turns from S to W or E are kept. A response coming up from the I/O row can then reach its column once it is inside the mesh. This is why I/O can only sit under the south edge.

**Arbitration**
- Each output has a round-robin arbiter (`bsg_round_robin_arb`).
- When several inputs want the same output, one wins per cycle. The arbiter's pointer moves past the winner, so no input waits more than four turns.

**Stubbed edges**
- `stub_p` marks sides (one bit each for W, E, N, S) that face the edge of the chip.
- A stubbed input has no FIFO and is always ready.

## Nodes, tiles and the two networks

- `bsg_manycore_mesh_node` holds two routers: `fwd_router` carries request packets and `rev_router` carries response packets. They share the same coordinates and links.
- `bsg_manycore_tile` is a node plus a standard endpoint.
- The top wires every tile to its four neighbours. It ties off the W, E and N edges with a constant link (never valid, always ready).
- The south side of the bottom row connects to the I/O row:
  - Column 0 of that row holds `mesh_master_example`.
  - Every other column holds a `mesh_slave_example` memory of `io_mem_els_p` words.
  - I/O nodes have no router of their own. Their endpoint is wired straight to the south link of the tile above.

**Why there are two networks.** A slave may need to send a response before it can take the next request. If responses shared the request network, a full network could stop every slave, and the whole mesh would deadlock. The reverse network cannot block like that, because every endpoint always drains it: the endpoint's returned-packet FIFO is always dequeued, and the credits below guarantee there is room for what arrives.

## Endpoints

### Barebones endpoint

`bsg_manycore_endpoint` does two things:
- It buffers incoming requests in a FIFO of `fifo_els_p` = 4 entries and offers them with valid/yumi.
- It passes outgoing requests to the link (valid/ready) and sends responses back (valid/ready). Returned responses come out through a FIFO that is dequeued every cycle (valid only).

### Standard endpoint

`bsg_manycore_endpoint_standard` is what tiles and I/O nodes use. This is the part of the design with the most internal state.

**Slave side (`in_*`, `returning_*`)**
- A request is shown to the core as `in_v_o` with address, data, byte mask and write-enable. The core takes it with `in_yumi_i`.
- Each request the core takes reserves a slot in a pending-response FIFO, which records who asked and what kind of answer is due. A request is only shown to the core while a slot is free. This is the "held" condition counted by the top testbench.
- Stores are answered with a credit packet as soon as the core takes them.
- Loads wait for the core's `returning_v_i`/`returning_data_i`. The core must raise it in order, one answer per load. The slave example answers one cycle after `in_yumi_i`.
- Load data waits in a small data FIFO when the reverse link is busy. If nothing is waiting, it bypasses that FIFO and leaves in the same cycle it arrives. The 7-cycle round trip depends on this bypass.

**Swap**
- A swap (op `10` or `11`) goes to the core as a load.
- The next cycle the endpoint replays it as a full-word store of the swap data.
- The old value returns to the requester.
- Because the store follows the load before any other request is shown, the pair is atomic at that memory.

**Configuration registers**
These are selected by address MSB = 1. They are handled inside the endpoint and never reach the core.

| word address | register |
|---|---|
| 0 | `freeze_r_o`. Resets to 1 (`freeze_init_p`). A store writes bit 0, so a store of 0 unfreezes the tile. |
| 4 | `reverse_arb_pr_o`. Every store toggles it. |

Loads from these addresses return the register value.

**Master side (`out_*`, `returned_*`)**
- The core presents a request packet with `out_v_i`. It is sent when `out_ready_o` is high.
- `out_ready_o` requires both room in the network and at least one credit.
- **Credits** are handled by `bsg_manycore_credit_counter`:
  - The counter starts at `max_out_credits_p` = 80.
  - It loses one for each request sent and gains one for each response received, whether credit or data.
  - Credits therefore bound the number of a node's requests anywhere in the system.
- Returned load data comes out as `returned_v_r_o`/`returned_data_r_o`. It is valid only, so the core must take it.
- Loads to the same destination return in order. Loads to different destinations may return in any order.
- **Fence.** A core waits until `out_credits_o` equals `max_out_credits_p`. Then every store it issued has completed.

## Timing

With no other traffic, a load from a master example to the memory below the neighbouring tile takes **7 cycles** from request accepted to data returned:

| cycle | stage |
|---|---|
| 1 | forward router FIFO |
| 2 | forward router FIFO |
| 3 | slave endpoint input FIFO |
| 4 | memory read register |
| 5 | reverse router FIFO |
| 6 | reverse router FIFO |
| 7 | requester's returned-packet FIFO |

`mesh_master_example` measures this as `master_latency_o`, and the top testbench checks that it equals 7. Each additional hop adds one cycle per network. Contention adds the arbitration wait, which is 0 to 4 cycles per hop.

## The attached examples

- **`mesh_slave_example`** is a memory. It takes every request in the cycle it arrives (`in_yumi = in_v`), writes with the byte mask, and registers load data so that it returns the next cycle. Address bits above its size are ignored.
- **`mesh_master_example`** waits until it is unfrozen: some node must store 0 to its freeze register, at address `{1, 19'd0}` of node (0, ny). It then:
  1. writes `num_words_p` words with data = address to the memory at (`dest_x_i`, `dest_y_i`);
  2. reads them back and counts mismatches in `errors_o`;
  3. waits until its credits are all back (a fence);
  4. raises `done_o`.

## Parameters of the top

| parameter | default | meaning |
|---|---|---|
| `num_tiles_x_p`, `num_tiles_y_p` | 16, 16 | mesh size |
| `data_width_p` | 32 | data word |
| `addr_width_p` | 20 | word address, MSB selects configuration |
| `router_fifo_els_p` | 2 | router input FIFO depth |
| `fifo_els_p` | 4 | endpoint FIFO depths |
| `max_out_credits_p` | 80 | outstanding requests per node (4 to each of 20 destinations) |
| `io_mem_els_p` | 1024 | words in each I/O memory |
| `master_words_p` | 16 | words the master example tests |

## Simulating

Every testbench in `tb/` checks its own results. It prints `TB_RESULT checks=N failures=M` and has a watchdog. To build one with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/bsg_noc_pkg.sv rtl/bsg_manycore_pkg.sv \
  tb/tb_bsg_manycore_mesh.sv -y rtl -y tb --top-module tb_bsg_manycore_mesh
./obj_dir/Vtb_bsg_manycore_mesh
```

**Unit tests.** There is one testbench per module:
- FIFO, arbiter and credit counter: random tests against reference models.
- Router: hop latency, round-robin fairness, and a random scoreboard.
- Node.
- Barebones and standard endpoints.
- Memory and master examples: the master test checks the 7-cycle round trip against a modelled network, and checks that a corrupted answer is counted as an error.

**`tb_bsg_manycore_mesh`** runs the whole top at 4 × 3 tiles with 4 credits. A behavioural core on each tile:
- serves memory requests with random acceptance and 1 to 6 cycle load latency;
- runs store / load-back / fence rounds to random destinations, first all at one hot-spot tile.

Tile (0,0) additionally:
- unfreezes the master example;
- performs a swap;
- toggles an arbiter-priority bit;
- unfreezes another tile and reads its freeze register.

The test counts, and requires at least once:
- credit stall;
- network back-pressure;
- router output contention;
- S→W/E turns in the reverse network;
- fence waits;
- the swap, unfreeze and toggle;
- a request held for lack of a response slot.

The largest configuration simulated end to end is the 4 × 3 one above. The default 16 × 16 top passes Verilator lint and elaboration. A full-size simulation build produces about 270 large C++ files and takes well over ten minutes to compile on a 4-core machine. To run one anyway, instantiate the top in `tb_bsg_manycore_mesh` with no parameter list, set `NX = NY = 16`, `MAXC = 80` and `FULL = 1` (only tiles at multiples of 5 then generate traffic, and the credit-stall and held checks are skipped), and compile with `-j` to use more cores.

## Where this design departs from, or adds to, its description

**Conflicts in the source description, and how they were resolved**
- The description calls the atomic operation "compare and swap", but its packet has no compare operand and its op codes only name swaps. A plain swap is built.
- The freeze output is described both as "0 = frozen" and, in the register map, as "1 = freeze". The register map is followed: `freeze_r_o` = 1 means frozen, and a store of 0 unfreezes.

**Choices made here where the description is silent**
- The pending-response FIFO and the same-cycle bypass of returning load data.
- Crediting a store when the core takes it.
- Resetting frozen.
- The meaning of configuration word 4 as a toggle. The register map lists offsets 0x0 and 0x4; they are taken here as word addresses 0 and 4, because every address in a packet is a word address.
- The layout of the I/O row: master at column 0, memories elsewhere.
- The memory sizes.
- What the master example does.

**Not built**
- The tile processor.
- The link tie-off module: it is done inline in the top.
- The packet-encoding helper.
- Link tunnelling for virtual-mesh I/O.
- A DRAM controller that occupies several mesh positions.
- Accelerators that occupy several routers.
- The software token-queue primitive.

**Untested at full size**
- `reverse_arb_pr_o` is only an output. Whatever the core does with the priority is outside this RTL.
- Throughput under uniform random traffic is not measured against any figure, because none is given.
- The default 80 credits cover the bandwidth-delay product of a 80-cycle round trip at one word per cycle. Longer paths, such as a 128-cycle corner-to-corner store stream, need `max_out_credits_p` raised to match.
