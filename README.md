# NoC-aware early restart (ER-NoC) for a 64-core mesh

When a core misses in its L1 cache it waits for one word, the *critical
word*, but the cache has to fetch a whole 64-byte block. On a mesh
network-on-chip that block comes as a packet of five 128-bit flits: a head
flit carrying only the header, then four data flits B0, B1, B2 and T, each
with two 64-bit words. Classic *early restart* hands the critical word to
the core as soon as it arrives instead of waiting for the whole block. On a
congested network, though, the flits of one reply can be spread out by many
cycles, and the flit the core needs may be held up behind other traffic.

ER-NoC makes early restart network-aware with three small additions:

1. The L1 controller works out which data flit will carry the critical word.
   This is a 2-bit *critical flit identifier* (CFI): 0 = B0, 1 = B1, 2 = B2,
   3 = T. The CFI goes into the header of the miss request.
2. The L2 bank copies the CFI into the header of its reply.
3. Every router keeps a counter C per virtual channel. C is loaded from the
   CFI and counted down as the packet's flits cross the switch. Arbitration
   favours the lower C. Only the flits up to and including the critical
   flit get priority; the flits after it travel at normal priority.

This RTL implements that memory system: the L1 data caches with the CFI
unit and early restart, the L2 banks, network interfaces, routers and the
mesh. The cores are outside it. Each core is represented by a load port.

## System at a glance

| Item | Value | Origin |
|---|---|---|
| Mesh | 8 x 8, 64 nodes, X-Y dimension-order routing | published configuration |
| Router | 5 ports (E, S, W, N, PE), 3 VCs per port, 2 stages | published configuration |
| Link / flit | 128 bits of payload (+ 2-bit type, 2-bit VC) | published configuration |
| Word / block | 64-bit words, 8 words = 64 B per block | published configuration |
| Packets | request 1 flit; reply 5 flits H, B0, B1, B2, T | published configuration |
| L1 data cache | 32 KiB, 8-way, 64 sets, private | published configuration |
| L2 bank | 512 KiB per node (8192 blocks), shared, address-interleaved | size published; organisation own |
| VC buffer depth | 4 flits | own choice (matches the router drawing) |
| Physical address | 25 bits (= 64 x 512 KiB) | own choice |
| VC use | VC0 requests, VC1-VC2 replies | own choice |

## Which flit carries which word

| Flit | H | B0 | B1 | B2 | T |
|---|---|---|---|---|---|
| Content | header | W0, W1 | W2, W3 | W4, W5 | W6, W7 |
| Byte offsets | - | 0-15 | 16-31 | 32-47 | 48-63 |
| CFI | - | 0 | 1 | 2 | 3 |

So CFI = byte offset / 16. It is just the top two bits of the 6-bit block
offset (`cfi_unit`). The original drawing of this unit is labelled "offset
% flit size", but only the quotient puts word W3 into B1, as the design
intends. The quotient is what is built.

Header (`ernoc_pkg::header_t`, 44 bits, in the low bits of a head flit):
message type (request/reply), CFI, source x/y, destination x/y (4 bits
each) and the 25-bit address. Flit type is one of HEAD, BODY, TAIL or
HEADTAIL (for single-flit requests).

## The router and its CFI counters

This is the part that carries the idea, so it is described in full
(`router.sv`, `prio_arbiter.sv`).

**Pipeline.** A flit is written into its input VC buffer on a clock edge.

- **Stage 1.** While a head flit is at the front of a VC, route compute
  (X first, then Y; y grows to the south) and VC allocation take place.
- **Stage 2.** Switch allocation and crossbar traversal. The crossbar
  output drives the link, and the next router writes the flit into its
  buffer on the following edge.

A head flit therefore takes two cycles per hop when there is no
contention. Body and tail flits skip VC allocation and can move one hop
per cycle.

**Flow control.** Flow control is credit based, with one credit counter per
downstream VC. A credit goes back upstream one cycle after a flit leaves an
input buffer. With 4-flit buffers, one VC can stream a flit every cycle.

**VC allocation.** An output VC is held from a packet's head to its tail.
Requests may use only VC0 and replies only VC1 or VC2. Keeping the two
message classes apart prevents request-reply deadlock. Each output port
grants one VC per cycle.

**The counter C.** Each input VC has a 3-bit counter. When a head flit is
granted an output VC, C is loaded from the head:

- a reply loads its CFI (0..3);
- a request loads NOPRI (4), which means no priority.

Afterwards, each time a flit of that VC wins the switch:

- a head flit leaves C unchanged;
- a body or tail flit with C > 0 decrements C;
- a body or tail flit with C = 0 is the critical flit; C becomes NOPRI.

So C counts the data flits still to go up to and including the critical
one. It is 0 exactly when the critical flit is at the front of the buffer.
For example, with CFI = 1 the head, B0 and B1 are prioritised (C = 1, 1, 0)
and B2 and T are not.

**Arbitration.** VC allocation and both steps of the separable switch
allocator use the same `prio_arbiter`. The two steps are: one VC per input
port, then one input per output port. The arbiter finds the lowest C among
the requests, then picks round robin among the requests holding that
value. With equal counters the router behaves like a plain round-robin
router.

Worked example (checked by `tb_router`). Two replies want the East output
at the same time: packet W from the West input with CFI 3, and packet P
from the local PE with CFI 0. The East link carries:

    P.H  P.B0 | W.H  W.B0  W.B1  W.B2  W.T | P.B1  P.B2  P.T

P's critical flit B0 goes first. After that P's counter is NOPRI. W keeps
priority through its tail, because its critical flit is T. Round robin
would have alternated the two packets.

Starvation is limited because a packet's priority lasts at most four data
flits. The scheme does not guarantee fairness beyond that. `prio_evt`
pulses whenever the counters, rather than round robin, decided an output
grant.

## L1 controller and early restart

`l1_cache.sv`: 64 sets x 8 ways. Each way holds a valid bit, a tag and
four 128-bit flit slots.

**Lookup.** The address splits into tag (13 bits), set index (6 bits) and
byte offset (6 bits). The controller registers a load's address, then in
one cycle reads all ways of the set in parallel:

- a tag compare ANDed with the valid bit gives each way's hit;
- OR-ing those gives hit/miss;
- a way multiplexer selects the word.

The CFI unit works alongside and costs no time. On a hit the word is on
`resp_valid`/`resp_data` one cycle after the lookup cycle.

**Miss.** The controller picks a victim: the first invalid way, else a
per-set round-robin pointer. It sends a one-flit request with the CFI to
the block's home bank, which is node (block address mod 64). It then
writes each arriving data flit into the victim way. When the flit number
equals the CFI, the word goes to the core on the next cycle: this is the
early restart. `resp_early` is set unless the critical flit was the tail.
The block becomes valid when the tail arrives.

The cache handles one miss at a time. Its load port (`req_ready`) stays
closed until the fill completes, even though the core already has its
word. Only loads exist: there are no stores, no dirty state and no
coherence protocol.

With no other traffic, a miss that goes to the node's own L2 bank and
needs a word from B0 takes 11 cycles from load to word (measured in
`tb_tile`).

## Network interface

`nic.sv` sits between the caches and the router's PE port.

**Injection.** An L2 reply is sent as five flits on VC1 or VC2, whichever
has a credit when the packet starts. The NIC then sends one flit per
cycle as credits allow. A pending reply goes ahead of a waiting L1
request. A request is a single HEADTAIL flit on VC0.

**Ejection.** Requests go into a 4-entry FIFO until the L2 bank takes them.
Reply flits go straight to the L1, which always accepts them. The NIC
returns a credit to the router for every flit it takes.

## L2 bank

`l2_bank.sv` gives each node one bank of 8192 blocks. A block lives at:

- bank: block address mod (number of nodes)
- row: block address / (number of nodes)

The bank reads the block in one cycle. It then offers the NIC a reply
header addressed to the requester, carrying the request's CFI unchanged,
together with the 512-bit block. It handles one request at a time.

The bank is a plain block store with no tags, so it never misses. It
covers the whole 25-bit address space, so no memory behind it is needed.
A write-only fill port loads its contents.

## Top level

`ernoc_system` (parameters `MESH_X`, `MESH_Y`, `L1_SETS`, `L1_WAYS`,
`L2_BLOCKS`; defaults 8, 8, 64, 8, 8192) instantiates one `tile` per node.
Each tile contains a router, NIC, L1 and L2 bank. Ports:

- `core_req_valid/addr/ready`, `core_resp_valid/data/early`: one load port
  per core, index y*MESH_X + x.
- `fill_valid/fill_block/fill_data`: writes one 64-byte block into the
  distributed L2 by block address. In a full system this is where the
  memory controllers would deliver data.
- `evt_miss`, `evt_prio`: per-node event pulses for L1 misses and
  priority-decided router grants.

Node coordinates reach the tiles as constant input ports, not parameters.
All 64 tiles are therefore the same module, which keeps simulation builds
small.

## Departures from the published design, and gaps

- **Cores and instruction caches.** Not included: each core is a load port.
- **Memory controllers and DRAM.** The four memory controllers at the mesh
  corners, and the DRAM behind them, are not modelled. The L2 never misses.
- **L2 organisation.** Each L2 bank is a direct block store, not a 16-way
  set-associative cache.
- **L1 limits.** Loads only, one outstanding miss per core, and no new load
  until the fill completes.
- **VC count.** Three VCs per port, as in the published system
  configuration (the router drawing shows four).
- **CFI unit.** Computes offset / 16, not "offset % flit size" (see above).
- **Own choices.** The stage split of the 2-stage router and the rule that
  the head flit does not decrement C are interpretations. So are NOPRI
  after the critical flit, requests without priority, the VC classes,
  buffer depth, address width, bank interleaving, replacement policy and
  reset behaviour.
- **Block size.** Taken as 64 bytes (8 x 64-bit words). The published
  configuration also quotes 68 B for a block, which does not match eight
  64-bit words.

## Simulating

Everything simulates with Verilator 5 from the directory holding `rtl/` and
`tb/`. For example, the full-size system test:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/ernoc_pkg.sv tb/tb_ernoc_system_full.sv \
        --top-module tb_ernoc_system_full -o sim -j 4
    obj_dir/sim

Each testbench prints `TB_RESULT checks=N failures=M`. Each has a
watchdog that counts a failure and stops the run if it hangs.

| Testbench | What it shows |
|---|---|
| `tb_cfi_unit` | all 64 offsets map to offset/16 |
| `tb_prio_arbiter` | lowest-C-then-round-robin against a reference model |
| `tb_l1_cache` | hit/miss and replacement against a model; request header; word returned exactly one cycle after the critical flit; no response before it |
| `tb_l2_bank` | reply header (CFI copied, addressed to requester), block contents, two-cycle latency, hold until accepted |
| `tb_nic` | packet formats, flit order, credits never overrun, ejection routing |
| `tb_router` | two-cycle head latency, the priority example above, 400 random packets with X-Y routing, no VC interleaving, credit conservation |
| `tb_tile` | full loop through router and NIC on one node, unloaded miss latency |
| `tb_ernoc_system` | 3 x 3 mesh with tiny caches, 720 loads; every word checked; each mechanism must occur (hits, misses, early restart, CFI 0..3, priority grants) |
| `tb_ernoc_system_full` | the same at full default size: 64 cores, 6400 loads |
| `tb_cfi_mix` | the published critical-word distributions of 18 PARSEC 3.0 / SPLASH-2x benchmarks, replayed as all-miss traffic on a 4 x 4 mesh; reports cycles to the critical word vs. to the complete block |

Both system tests print the average miss latency to the critical word.
`tb_cfi_mix` is as close to the benchmark workloads as this design allows:
the programs need the cores, but what the memory system sees of them is
the distribution of the critical word over B0/B1/B2/T, which is published
per benchmark. With 16 cores missing at once, the critical word arrives on
average about 2 to 3 cycles before the complete block (about 23 vs. 26
cycles).
Building the full-size test takes about two minutes; it then runs in
seconds.

## Changing the design

- **Mesh size and cache sizes.** These are parameters of `ernoc_system`.
  Any mesh up to 16 x 16 works: coordinates are 4 bits.
- **Widths, VC count and buffer depth.** These are in `ernoc_pkg`. The
  reply-VC rule assumes at least two VCs.
- **Comparing with plain early restart.** Make `hprio` in `router.sv` always
  NOPRI, so every packet loads NOPRI into C. The router then arbitrates by
  round robin alone.
