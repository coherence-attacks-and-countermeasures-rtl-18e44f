# Coherence message checkers for a secure active interposer

A chiplet-based processor shares one cache-coherent memory among chiplets
that may come from different vendors. If one of them carries a hardware
Trojan in its network interface, the coherence protocol itself becomes an
attack surface: the Trojan can simply *listen* to the broadcasts that the
directories send to every chiplet (and so learn which addresses a process
on another chiplet is writing, enough for a covert channel), or it can
*send* messages it should not: requests with another chiplet's core ID,
writes to memory its chiplet may only read, data sent to a core that is
not the requester, or message types that do not exist.

This design puts the defence in the one part every chiplet has to use and
no chiplet vendor controls: the active interposer. Every link between the
interposer network and a chiplet or memory controller passes through a
**coherence message checker (CMC)**:

* **CMC-1**, on each chiplet's link, reads every message the chiplet sends
  before any flit of it enters the interposer network, and checks it
  against protocol rules and against a per-region table of what that
  chiplet is allowed to touch. A bad message raises a machine-check
  exception and the system stops.
* **CMC-2**, on each memory controller's link, looks at the directory's
  broadcasts. A chiplet that has no access to the broadcast's memory region
  does not get a copy; the requester receives a negative acknowledgement
  (NACK) in its place, so the protocol still completes.

The permissions come from a trusted OS running on the interposer, which
writes them into an **access-permission-unit (APU) table** inside each
checker.

## System and topology

| part | count | placement (mesh column, row) |
|---|---|---|
| chiplets, 8 cores each | 8 | chiplets 0-3 at column 0, rows 0-3; chiplets 4-7 at column 2, rows 0-3 |
| memory controllers with directories | 4 | column 1, rows 0-3 |
| interposer routers | 12 | 3 columns x 4 rows mesh, numbered 72-83 row by row |
| CMC-1 | 8 | one per chiplet link |
| CMC-2 | 4 | one per memory-controller link |

Router 72 + n is at column n mod 3, row n / 3. Inside the RTL a router is
called node n (0-11) and the flit carries it as the 4-bit `dst` field.

```
        col 0          col 1          col 2
row 0   72 chiplet 0   73 MC 0        74 chiplet 4
row 1   75 chiplet 1   76 MC 1        77 chiplet 5
row 2   78 chiplet 2   79 MC 2        80 chiplet 6
row 3   81 chiplet 3   82 MC 3        83 chiplet 7
```

The chiplets and memory controllers are outside this RTL. `interposer_top`
has one ingress and one egress link per chiplet and per memory
controller, and the testbenches play those parts.

## Messages on the interposer links

Links are 64 bits wide. A message is a head flit and an address flit; the
data responses (`DATA`, `DATA_SHARED`, `DATA_EXCLUSIVE`) and a dirty
writeback (`WB_DIRTY`) add eight 64-bit data flits, ten flits in all.

Head flit (`head_t` in `cmc_pkg`):

| bits | field | width | checked |
|---|---|---|---|
| 63:59 | message type | 5 | yes |
| 58:51 | sender ID | 8 | yes |
| 50:43 | destination ID | 8 | yes |
| 42:41 | virtual network | 2 | yes |
| 40:33 | current owner | 8 | no |
| 32 | dirty | 1 | no |
| 31:0 | unused | 32 | no |

The address flit holds the physical address (upper 32 bits must be zero:
4 GB of memory). On the link, a flit is `link_flit_t`: `head`, `tail` and
the 64 data bits. Inside the interposer (`noc_flit_t`) the checker adds
the virtual network and destination router, which it works out itself
from the checked head, so a chiplet cannot mis-frame a packet.

**IDs.** Cores are 0-63; core i belongs to chiplet i / 8. Memory
controllers are 64-67. ID 255 (`BCAST_ID`) as destination marks a
broadcast.

**Addresses.** Memory is cut into 64 regions of 64 MB; the region is
address bits 31:26. The home memory controller of a 64-byte block is
address bits 7:6.

**Message types and virtual networks** (MOESI Hammer style protocol):

| VN | use | types (encoding) |
|---|---|---|
| 0 | requests | GETX 0, GETS 1, PUT 2 |
| 1 | forwards from directories | FWD_GETX 3, FWD_GETS 4, WB_ACK 5, WB_NACK 6 |
| 2 | responses | ACK 8, ACK_SHARED 9, DATA 10, DATA_SHARED 11, DATA_EXCLUSIVE 12, WB_CLEAN 13, WB_DIRTY 14, NACK 15 |
| 3 | unblocks | UNBLOCK 16, UNBLOCKS 17, UNBLOCKM 18 |

Any other type code is undefined and always illegal.

## The APU table

One table per checker (12 in all), 64 entries, one per region, each entry
two bits per chiplet: `00` no access, `01` read only, `11` read/write;
`10` is unused and treated as no access. Chiplet c's pair is
`entry[2c+1:2c]`. That is 64 x 16 = 1024 bits per table.

`apu_table` reads synchronously: the index given with `rd_en` produces the
entry on the next cycle. The write port (`wr_en`, `wr_idx`, `wr_entry`) is
meant for the trusted OS only; at the top level one write can update any
set of tables (`apu_wr_sel`, one bit per router). Reset clears every entry,
so nothing is allowed until the OS has programmed the tables.

## CMC-1: what a chiplet may send

`pcm_checker` evaluates these rules on the head flit, the address and the
APU entry of the address's region. The first rule broken is reported as the
violation code (`viol_e`):

1. **Format.** The type must be defined and travel on its own virtual
   network. Types only a directory sends (forwards, writeback acks, NACK)
   are illegal from a chiplet.
2. **Masquerading.** The sender ID must be one of the chiplet's own eight
   cores.
3. **Address.** The address must lie in the 4 GB memory.
4. **Diversion.** Requests, writebacks and unblocks must go to the
   address's home memory controller. Acks and data must go to a core, and
   that core's chiplet must itself be allowed to read the region. A Trojan
   cannot hand data to an outsider or steer a request to the wrong
   directory.
5. **Permission.** The sender's chiplet needs:

| needs | types |
|---|---|
| read (01 or 11) | GETS, ACK_SHARED, DATA, DATA_SHARED, DATA_EXCLUSIVE, WB_CLEAN, UNBLOCK, UNBLOCKS |
| read/write (11) | GETX, PUT, WB_DIRTY, UNBLOCKM |
| nothing | ACK (a cache that does not hold the block) |

The checker works through one message at a time (`cmc1`):

| cycle | stage |
|---|---|
| 1 | head flit taken: control fields |
| 2 | address flit taken; APU table read of its region |
| 3 | check (`pcm_checker`, registered) |
| 4, 5 | legal: head and address flit sent to the router |
| 6... | data flits passed through, one per cycle |

A head flit leaves 3 cycles after it arrives, and a control message keeps
the checker busy for 5 cycles. The third stage of the checker (packet
modification) does nothing in CMC-1 and is skipped. An illegal message is
never forwarded: `exception` rises and stays high until reset, with the
reason in `viol_code`, and the checker takes no more flits.

## Exception and halt

`interposer_top` ORs the eight CMC-1 exceptions into `mce`, the
machine-check exception. `mce` drives `halt` on every CMC-1, so after the
first violation no chiplet can start a new message. Messages already
inside the network still drain. `chip_exception` and `chip_viol` tell the
OS which chiplet broke which rule.

## CMC-2: what a chiplet may hear

A directory broadcast is a `FWD_GETX` or `FWD_GETS` with destination 255.
Its sender field is the original requester. CMC-2 looks up the region in
its APU table, then turns the broadcast into eight two-flit messages, one
per chiplet, in chiplet order:

* chiplet with read access: the forward itself, routed to that chiplet's
  router on VN 1;
* chiplet without access: a `NACK` to the requester on VN 2, with sender
  ID 8c (core 0 of the excluded chiplet c), and current owner and dirty
  cleared.

The requester's protocol engine therefore sees one reply per chiplet as
before, while the excluded chiplets see nothing. This is what stops the
GETX-spy covert channel: the Trojan's chiplet never learns which blocks
the spy writes. Every other message from a memory controller passes
through unchanged, after the same three-stage latency. `nack_sent` and
`bcast_seen` pulse for each NACK created and each broadcast handled.

## Interposer routers

`noc_router` is a five-port router (local, north, east, south, west) with
one input buffer (`flit_fifo`, 4 flits) per virtual network on every input.
It routes X first, then Y, on the `dst` field, and uses wormhole switching:
a packet holds its output for its virtual network from head to tail, so
packets of one network never interleave on a link, while packets of
different networks may. Each output picks one flit per cycle, round robin
over all (input, network) buffers. Flow control is valid/ready with one
ready bit per virtual network. An idle router forwards a flit in one
cycle.

## Where this RTL departs from the published design

* **Virtual channels.** The published routers have several virtual
  channels per virtual network (4 in the main configuration; 6, 8 and 10
  were also evaluated). Here each virtual network has a single buffer.
  Virtual-channel allocation is not modelled.
* **Clocks.** The published interposer runs at 250 MHz and the chiplets at
  1 GHz. Here everything is on one clock; the clock-domain crossing at
  each link is left to the link.
* **128-bit chiplet flits.** The chiplets' internal flits are 128 bits and
  are split into 64-bit flits at the interposer. The RTL starts at the
  64-bit link.
* **Link width.** Only the 64-bit interposer links are built. The 128-bit
  variant evaluated for performance is not.
* **Pipelining.** Each checker handles one message at a time, which is the
  simplest schedule with the published three-stage, two-cycle-analysis
  latency. It is not pipelined across messages.
* **GETX on read-only regions.** The published description has one
  example that lets a GETX through to a region the chiplet may only read.
  It also lists "a chiplet pretending to have write access it does not
  have" as a threat to be caught by comparing GETX/GETS with the
  permissions. This RTL follows the second: GETX needs read/write.
* **Choices not given by the published design**: head-flit bit positions
  (only field widths are given), the type encoding, the use of all four
  virtual networks, the ID map, home-controller interleaving, the broadcast
  form (destination 255), the NACK's fields, routing, switching and
  arbitration, the APU write port and its reset value.
* **Not built.** The chiplets, the memory controllers with their
  directories, and the trusted OS (a core on the interposer) are outside
  this RTL.

## Verification

Each testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it shows |
|---|---|
| `tb_apu_table` | read latency, per-entry writes, reset to no access |
| `tb_pcm_checker` | directed cases for each rule, then 20 000 random messages against a reference model written from the rule table |
| `tb_cmc1` | 3-cycle latency, data pass-through, back-pressure, each violation kind raising the exception without leaking a flit, halt |
| `tb_cmc2` | broadcast split per chiplet, NACK count, unchanged unicasts, 3-cycle latency, random back-pressure |
| `tb_flit_fifo` | buffer against a queue model |
| `tb_noc_router` | X-Y port choice, order, no interleaving within a network, delivery under random back-pressure, one-cycle hop |
| `tb_interposer_top` | full size: legal traffic from all links at once, broadcast filtering, a masquerade raising the machine check and halting all links |
| `tb_getx_spy` | full size: a 128-bit covert message. When the region is readable by the Trojan's chiplet, the Trojan decodes all 128 bits. When the region is private, it sees nothing and the spy gets 7 NACKs per bit |

The timing in `tb_getx_spy` covers only the interposer, about 2 500 cycles
for 128 bits. The cores, caches and directories, which dominate the time
of the real attack, are modelled with zero delay.

## Simulating and changing it

All files are SystemVerilog 2017; `cmc_pkg.sv` must be compiled first.

```
verilator --binary --timing --assert -Irtl \
    rtl/cmc_pkg.sv rtl/apu_table.sv rtl/pcm_checker.sv rtl/cmc1.sv rtl/cmc2.sv \
    rtl/flit_fifo.sv rtl/noc_router.sv rtl/interposer_top.sv \
    tb/tb_interposer_top.sv --top-module tb_interposer_top
./obj_dir/Vtb_interposer_top
```

Other tests: replace the testbench file and top module. The unit tests
need only the modules below them.

To change the system size, edit the constants in `cmc_pkg`: chiplets,
cores per chiplet, controllers, regions, mesh size. The placement of
chiplets and controllers on the mesh is in `chiplet_node` and `mc_node`,
and the ID map in `node_of_id`. The rules live in one `case` in
`pcm_checker`. The buffer depth is `BUF_DEPTH` on `interposer_top`.
