# A five-port NoC router with dynamic virtual channels and allocator-resident control

This is synthesizable SystemVerilog for a network-on-chip router that shares one
buffer among all the virtual channels (VCs) of an input port and hands out VCs
at run time. It follows the router of S. Onsori and F. Safaei, "Performance
Enhancement of Routers in Networks-on-Chip Using Dynamic Virtual Channels
Allocation" (CAIJ 1(2), 2014). That router is a table-based dynamic-VC router in
the style of ViCHaR. Its own contribution is where the control logic lives.
The VC control table, the VC availability tracer and the token dispenser are
not a separate combinational block that both allocators talk to. They sit inside
the VC allocator as clocked logic. The VC allocator updates them on its own
clock edge and passes the updated table to the switch allocator. The RTL here
is written from the paper's description. It is not the authors' code.

Buffers dominate a router's area and leakage. Statically split VC buffers waste
space whenever traffic does not match the split. With a unified buffer, one busy
VC can take most of a port's 16 slots, or 16 packets can each hold a few. The
price is bookkeeping: something must remember which slots belong to which VC,
in what order. This design keeps that in a small per-port table.

## Numbers at a glance

| quantity | value | from |
|---|---|---|
| ports | 5 (local + N, E, S, W) | paper |
| UBS slots per input port | 16 | paper |
| VCs per input port | up to 16 (one 16:1 request per VC) | paper |
| flit width | 128 bits (16/32/64 also simulated) | paper |
| packet | 4 flits: header, body, body, tail | paper |
| TYPE field | flit bits 1:0: 00 free, 01 header, 10 body, 11 tail | paper |
| VC allocator | 25 arbiters of 16:1, then 5 of 5:1 | paper |
| switch allocator | 5 arbiters of 16:1, then 5 of 5:1 | paper |
| routing | XY dimension order on a 2-D mesh | this design |
| header destination | X in bits 5:2, Y in bits 9:6 | this design |
| header latency | 3 cycles from input link to output link | this design |
| throughput | one flit per cycle per port | paper (pipelined) |

## Data flow through one router

```
 in_flit/in_vc ──► UBS (16 slots) ──rd──► crossbar ──► out_flit/out_vc
       │              ▲ slot_free            ▲ sel/vc
       │              │                      │
       ├──► slot availability tracer ──► up_credit (to upstream)
       │
       ├──► routing unit ──┐
       ▼                   ▼
   ┌────────────── VC allocator ──────────────────┐
   │ VC control table ×5 (one per input port)     │──tables──► switch allocator
   │ VC availability tracer ×5 (one per output)   │◄─departures─┘   │
   │ token dispenser ×5, arbiters 25×16:1, 5×5:1  │                 └─► UBS read,
   └──────────────────────────────────────────────┘                     crossbar setting
```

### Unified buffer structure (UBS) and slot availability tracer

Each input port has a UBS of 16 flit slots (`ubs.sv`). A slot is free exactly
when the TYPE bits of the flit it holds are 00. A read therefore frees a slot by
writing 00 into its TYPE bits. The slot availability tracer
(`slot_availability_tracer.sv`) reads the 16 "TYPE == 00" bits. Each cycle it
offers the lowest free slot to the next arriving flit. It also sends one
`up_credit` pulse upstream for every slot that is read out. The flit store has
one write port and one registered read port, so it can map to block RAM. The
TYPE bits are kept in flip-flops because all 16 are tested every cycle.

### VC control table: how flits find their packet

This is the least obvious part of the design. The UBS does not know which VC a
slot belongs to. The VC control table of the port (`vc_control_table.sv`, one
per input port) keeps, for each of the 16 VCs:

* `state`: idle, waiting for VC allocation (header stored and routed), or active
  (a downstream VC is held);
* `route`: the output port the routing unit computed from the header;
* `out_vc`: the downstream VC the token dispenser assigned;
* a list of up to 4 entries {TYPE, slot number} in arrival order. An
  arriving-flit pointer says where the next entry goes. A departing-flit pointer
  says which entry leaves next. A count says how many entries are in use.

Every flit arrives with the number of the VC it travels on (`in_vc`). The
upstream router chose that number when it allocated the VC. On the edge that
stores the flit in the UBS, the table appends {TYPE, slot} to that VC's list.
For a header, the same edge also records the route and moves the VC from idle to
waiting. Body and tail flits join their header's VC the same way, whether or
not the header has won VC allocation yet. When the switch allocator sends a VC's
head flit, it reads that entry's slot number. The departing pointer then moves
on. When the flit sent was the tail, the VC becomes idle, and one cycle later
`up_rel_valid/up_rel_vc` tells the upstream router that it may reuse that VC
number. A VC holds one packet at a time, so four entries per VC are enough.
The 16 VCs of a port share its 16 slots in any mix.

### VC allocation with the token dispenser

The VC allocator (`vc_allocator.sv`) holds the five control tables, one VC
availability tracer per output port (`vc_availability_tracer.sv`: which
downstream VCs are free) and one token dispenser per output port
(`token_dispenser.sv`). It allocates in two separable stages:

1. For every (input, output) pair, a 16:1 arbiter picks one of the input's
   waiting VCs routed to that output. That makes 25 arbiters.
2. For every output, a 5:1 arbiter picks one input among the stage-1 winners,
   but only while that output's dispenser holds a token (a free downstream VC).

The winner takes the token. On the same edge its table entry becomes active and
records the token as `out_vc`, and the tracer marks that downstream VC busy.
The dispenser is clocked: it keeps the next token ready in a register. The next
token is chosen from the tracer's free vector with the token just taken masked
out, because the tracer marks that VC busy only on the same edge. A downstream
VC becomes free again when the downstream router reports that its tail has left
(`ds_rel_valid/ds_rel_vc`). Each output allocates at most one VC per cycle. If
all 16 downstream VCs of an output are held, headers for that output wait.

### Switch allocation and the crossbar

The switch allocator (`switch_allocator.sv`) reads the tables the VC allocator
exports. A VC may request when it is active, has a flit at its departing
pointer, and its output port has a credit. Stage 1 uses one 16:1 arbiter per
input; stage 2 uses one 5:1 arbiter per output. For each winner, on one edge, the
allocator:

* reads the head slot from the UBS;
* returns the departure to the table;
* spends one of the output's credits;
* registers the crossbar select and the downstream VC number.

In the next cycle the UBS data and that setting go through the crossbar
(`crossbar.sv`, one 5:1 multiplexer per output) straight onto the output link.
Each output keeps a credit counter that starts at 16, the downstream UBS size.
It goes down by one per flit sent and up by one per `ds_credit` pulse.

### The arbiters

Every arbiter is `rr_arbiter.sv`. It holds two simple priority arbiters, one on
the requests at or above a mask pointer and one on all requests. The masked
arbiter's grant wins when it has one. The pointer moves past the winner only
when the caller says the grant was used (`advance`). In both allocators a
stage-1 arbiter therefore keeps its turn when its winner loses stage 2. The
result is round-robin arbitration built from two fixed-priority arbiters and a
mask. The paper names exactly that pair of masked simple-priority arbiters, and
also calls the arbitration "constant priority". This design reads it as the
usual mask-based round robin. A true fixed priority would starve high VC
numbers under load.

## Timing

Edges are counted from the edge that stores the header (t):

| cycle | header | body/tail flits |
|---|---|---|
| t (edge) | written to a UBS slot; route and slot entered in the table | same, appended to the VC |
| t+1 | VC allocation; VC active after edge t+1 | - |
| t+2 | switch allocation; UBS read on edge t+2 | SA as soon as the VC is active and the flit stored |
| t+3 | on the output link (`out_valid`) | one per cycle behind the header |

The end-to-end testbench checks this exactly: the header leaves three cycles
after it was presented on the input, and the three following flits leave on the
next three cycles.

## Link protocol

The paper names the signals between routers only in outline. This design uses,
per port:

| direction | signals | meaning |
|---|---|---|
| upstream → router | `in_valid`, `in_vc[3:0]`, `in_flit` | a flit and the VC it travels on |
| router → upstream | `up_credit` | one UBS slot freed (one pulse per slot) |
| router → upstream | `up_rel_valid`, `up_rel_vc` | that VC of this input is idle again |
| router → upstream | `up_free_slots` | free-slot count (registered, informational) |
| router → downstream | `out_valid`, `out_vc`, `out_flit` | a flit and its downstream VC |
| downstream → router | `ds_credit`, `ds_rel_valid`, `ds_rel_vc` | the same two returns, from downstream |

Two routers connect by wiring `out_*` of one to `in_*` of the other, and
`up_*` of the second back to `ds_*` of the first. A source (a core's network
interface) must follow the same rules as an upstream router:

* start with 16 credits per port and send only with a credit in hand;
* open a new packet only on a VC that is idle (released);
* send all four flits of a packet on one VC.

Flits of different packets may interleave on a link because they carry
different VC numbers. The router has assertions for each of these rules, for
example a flit arriving with no free slot, or a header on a busy VC.
`cur_x`/`cur_y` give the router's mesh position. East is +X and North is +Y.
Port numbers are 0 local, 1 north, 2 east, 3 south and 4 west. Reset is
asynchronous and active low (`rst_n`). It empties every UBS and table, frees
every VC and sets every credit counter to 16.

## Parameters

`noc_router` has `PORTS` (5), `SLOTS` (16), `VCS` (16), `FLIT_W` (128) and
`DEPTH` (4 entries per VC, one packet). The defaults live in the `noc_pkg`
package, together with the TYPE and port encodings and the header field
positions. Port numbers are 3 bits and coordinates 4 bits, so `PORTS` above 8
or a mesh wider than 16 needs the package widened. At the defaults, coarse
synthesis with yosys gives about 12,200 word-level cells, 1,815 flip-flops and
12,160 memory bits. The memory bits are 10,240 of UBS flit store and 1,920 of
table slot lists.

## What follows the paper and what does not

Taken from the paper:

* five ports, 16 UBS slots per port, 128-bit flits, four-flit packets, and the
  TYPE encoding with 00 marking a free slot;
* a table-based dynamic VC allocation with arriving and departing flit pointers
  in the table;
* the control table, availability tracer and token dispenser placed inside the
  VC allocator and updated there;
* the arbiter counts of both allocators and the masked two-priority arbiters;
* the slot availability tracer updated with the UBS and used as credit to the
  neighbours;
* the SA reading the UBS and advancing the table.

Choices of this design, where the paper says nothing:

* XY routing and the header field positions;
* the VC tag on each link flit, the credit pulses and the VC release messages;
* the choice of the lowest free slot and the lowest free VC;
* the pipeline split: routing with the buffer write, then VA, then SA with the
  UBS read, then the crossbar;
* the pairing of the 25 VA arbiters with (input, output) pairs;
* the one-packet-per-VC rule.

Departures and omissions:

* **Embedded-memory control table.** The paper's second implementation puts the
  control table in Virtex-6 block RAM. Here the slot lists are written as an
  array with one write port. The heads of all 16 VCs are read at once, so a
  tool will map them to LUT RAM or flip-flops, not block RAM. The flit store
  does have the block-RAM coding pattern.
* **Body flits and their header.** The paper says a body or tail flit checks in
  the table whether its header already has a VC. Here the VC number comes with
  the flit, and the flit is listed under that VC at once. The behaviour seen
  from outside is the same: body flits follow their header's VC and never
  overtake it.
* **Arbiter priority.** The paper calls the arbitration "constant priority".
  The arbiters here rotate their priority with a mask pointer (see above). To
  get a fixed priority, hold `advance` low.
* **Credit timing.** The credit leaves when the flit is read from the UBS, one
  cycle before it crosses the crossbar. The paper updates the tracer "when a
  flit enters UBS or leaves a crossbar switch".
* **Not reproduced.** The paper's FPGA results (delay, frequency, power, area
  on Virtex-6, and the comparison with ViCHaR) are implementation measurements
  and are not reproduced here. ViCHaR itself, the baseline, is not included.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_rr_arbiter` | every grant of the 16:1 and 5:1 arbiters against a reference pointer model; strict rotation |
| `tb_ubs` | slot contents, one-cycle read latency, TYPE-based free bits, against a shadow copy |
| `tb_slot_availability_tracer` | lowest free slot, free count, one credit per read |
| `tb_routing_unit` | all 65,536 coordinate pairs of a 16 × 16 mesh against XY routing |
| `tb_vc_control_table` | random arrivals, allocations and departures, all outputs every cycle, release pulse timing |
| `tb_vc_availability_tracer` | busy bits against a model; all 16 VCs taken at once |
| `tb_token_dispenser` | next token = lowest free minus the one taken; never handed out twice |
| `tb_vc_allocator` | exact grant cycle and VC for a lone header; three-way contention resolved one per cycle in order; random traffic with downstream VC exhaustion: grants only to waiting VCs of that route, no VC given twice, no starvation |
| `tb_switch_allocator` | lone VC granted at once; one grant per input and output; head slot read; credits never exceeded and counted exactly; no idle cycle while work is ready |
| `tb_crossbar` | random selections, data, valid and VC |
| `tb_noc_router` | full-size router, all defaults: five neighbours with interleaved packets on up to three VCs each, random back-pressure, exact header latency, every flit bit-checked, all credits and VCs returned at the end; it counts VA contention, SA contention, credit stalls, full UBSs, downstream VC exhaustion, many live VCs on one input, interleaving and VC reuse, and fails if any never happened |
| `tb_flit_widths` | the router at 16, 32, 64 and 128-bit flits, 300 packets per input each, every flit checked (helper `flit_width_harness`) |

Run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/noc_pkg.sv tb/tb_noc_router.sv --top-module tb_noc_router -o sim
./obj_dir/sim
```

Replace `tb_noc_router` with any testbench name. `tb_noc_router` sends about
5,500 packets.

## Files

`rtl/`: `noc_pkg` (constants and types), `rr_arbiter`, `ubs`,
`slot_availability_tracer`, `routing_unit`, `vc_control_table`,
`vc_availability_tracer`, `token_dispenser`, `vc_allocator`,
`switch_allocator`, `crossbar`, `noc_router` (top).
`tb/`: one `tb_<module>` per module, plus `tb_flit_widths` and
`flit_width_harness`.
