# NEBB: bypassing non-empty buffers in a mesh or torus network-on-chip

A lookahead bypass router lets a flit skip buffer write and allocation when
the router knows one cycle ahead that the flit is coming. A small control
message, the *lookahead* (LA), travels one cycle ahead of its flit and
reserves the crossbar. The flit then spends two cycles per hop (switch and
link) instead of four (buffer write, allocation, switch, link), and it never
touches the buffers, which use the most router power.

Classic bypass routers allow this only when the input buffer the flit would
otherwise enter is **empty**. That keeps packets in order, but most NoC
protocols do not need that order. Under load the condition fails often, so
the bypass goes unused just when it would help most.

*Non-Empty Buffer Bypass* (NEBB) relaxes the condition. A flit may overtake
flits waiting in its input VC, as long as no two packets can end up
interleaved in one VC buffer. The router implemented here uses the
**Hybrid** form of NEBB, which picks wormhole (WH) or virtual cut-through
(VCT) rules per packet, whichever lets the packet bypass. It supports a 2D
mesh and, with Flit Bubble Flow Control (FBFC), a 2D torus, both with shared
(DAMQ) input buffers.

Default configuration (the evaluated one):

| | |
|---|---|
| network | 8 x 8 mesh (`TORUS=1` for a torus), 4 nodes per router, 256 nodes |
| router | 8 ports: X+, X-, Y+, Y-, four local ports |
| flit | 128-bit payload + 24-bit control sideband |
| packets | 1 or 5 flits (up to 7 supported) |
| VCs | 2 per port (2 to 4 supported) |
| input buffer | 12-flit shared DAMQ per port, 1 slot reserved per VC |
| routing | dimension order, X then Y, computed one hop ahead |
| arbiters | round-robin per input (SA-I), 8:1 matrix per output (SA-O), 8:1 matrix LA arbiter per output |
| VC selection | the free downstream VC with the most credits |
| link | 1 cycle |

## The bypass decision

This is the heart of the design (`rtl/nebb_router.sv`). In the cycle an LA
arrives at input port *p*, the router decides whether the flit arriving in
the next cycle goes straight to its output. The LA names the flit's input VC
*v* here and its output port *o* here.

**Later flits of a packet.**

* The packet was bypassed under VCT and holds a lock on *o*. The flit always
  bypasses: its room downstream is already reserved, and its LA has maximum
  priority in the LA arbiter.
* The packet is advancing from VC *v* under wormhole rules. Its route and
  output VC are in *v*'s control registers. The flit may bypass if *v*'s
  buffer is empty, so it cannot overtake its own packet, and if its output
  VC has a credit.

**Head or single-flit packet.** VC *v* must be idle: no packet of *v* may
already be advancing (condition 1a). Then:

| VC *v* buffer | packet | rule | room needed in the downstream VC |
|---|---|---|---|
| empty | any | wormhole | 1 flit |
| not empty | single flit | wormhole | 1 flit |
| not empty | multi-flit | VCT, locks *o* | whole packet, and *o* not already locked |

Why the last row needs VCT: suppose a multi-flit head overtook a buffered
packet under wormhole rules and a later flit of it then had to stop. That
flit would be written behind the other packet, in the same VC buffer as a
packet it does not belong to, and it would lose its routing state. Under
VCT the whole packet's room is reserved downstream, and maximum LA priority
guarantees that every later flit bypasses too. So the packet crosses the
router without ever touching the buffer it overtook.

A lock stays in place until the packet's tail passes. Only one packet per
output can hold a lock. While the locked packet has no flit in a cycle (a
"hole", because its upstream is sending flit by flit), other traffic may use
the output: lookaheads under wormhole rules, and buffered flits.

A free downstream VC is picked for every head (see *VC selection*). Eligible
LAs for the same output are then arbitrated by a matrix arbiter; an LA that
loses has its flit written into the buffer. A winning LA takes both its
output and its input port for the next cycle. Buffered flits only get the
crossbar where no LA won: LAs have priority.

Interleaving in a downstream VC is prevented by the output-VC *busy* flags.
A downstream VC that a multi-flit packet holds is not handed to another
head until the tail has passed.

## Credits and shared buffers

Each transit output keeps a `credit_tracker` for the downstream router's
12-slot buffer. Each VC has one private slot; the other `12 - NUM_VCS` slots
are shared. The room for VC *v* is its unused private slot plus the unused
shared slots. A send takes:

* 1 slot for a wormhole flit;
* the whole packet for the head of a VCT bypass. The packet's later flits
  take nothing. Without this reservation, wormhole flits of another VC could
  fill the shared slots the VCT packet counted on;
* in a torus, the whole packet for any head that is injected (local input
  to transit output) or turns from X to Y. This is the FBFC rule, and the
  head needs room for the packet **plus one flit**, the bubble that keeps
  each ring from deadlocking. Reserving the whole packet at the head keeps
  the bubble in a shared buffer, even when two packets are interleaved on
  the link.

The downstream router returns one credit per flit that leaves an input port,
whether it was bypassed or read from the buffer. The credit is registered and
arrives upstream one cycle after the departure is decided. Ejection ports
are taken to accept a flit every cycle.

## The buffered pipeline

Flits that lose or cannot bypass are written into the input's DAMQ
(`damq_buffer`). In this shared pool each VC is a linked-list FIFO. One cycle
later:

* **SA-I** (`sa_input_arbiter`) picks one VC per input by round robin. The
  picker does not check whether that VC can move. A blocked VC wastes the
  cycle, so output state does not have to reach the inputs.
* Once a VC advances a non-tail flit, it keeps the priority, so packets go
  out without holes. It loses the priority the first time its flit fails to
  advance. Without this release, two inputs each holding priority for a
  blocked packet can deadlock a torus with FBFC.
* A head flit also gets its downstream VC in this cycle. It needs 1 slot,
  or packet + 1 under FBFC.
* **SA-O** (`matrix_arbiter`, one per output) picks one input per output
  among the outputs no LA took.

The winner is read out, crosses the crossbar in the next cycle, and is
registered at the output. The output register also produces the flit's
lookahead for the next router. The LA's route field is computed by
`la_route` one hop ahead, so the LA reaches the next router one cycle
before the flit.

Cycle by cycle, for a flit whose LA reaches router B in cycle *t*:

| cycle | bypass | buffered |
|---|---|---|
| t | LA arbitration at B | LA loses or is not eligible |
| t+1 | flit crosses B's crossbar, LA for C sent | flit written into B's buffer |
| t+2 | link to C (LA at C) | SA-I / VA / SA-O at B |
| t+3 | flit at C | crossbar |
| t+4 | | link |
| t+5 | | flit at C |

## Module map

| file | block |
|---|---|
| `rtl/nebb_pkg.sv` | flit, lookahead, credit and event types; DOR routing functions |
| `rtl/damq_buffer.sv` | shared input buffer, linked-list per VC |
| `rtl/la_route.sv` | one-hop-ahead dimension-order routing |
| `rtl/matrix_arbiter.sv` | least-recently-granted N:1 matrix arbiter |
| `rtl/la_arbiter.sv` | LA arbiter: matrix arbiter + maximum priority for the locked packet |
| `rtl/sa_input_arbiter.sv` | SA-I round robin with body-flit priority |
| `rtl/vc_select.sv` | highest-credit downstream VC selection |
| `rtl/credit_tracker.sv` | shared-buffer credit accounting with reservations |
| `rtl/nebb_router.sv` | the router |
| `rtl/nebb_noc.sv` | K x K mesh/torus of routers, concentration 4 (top) |

**Flit format** (`flit_t`, 152 bits): `head`, `tail`, `size` (3 bits,
packet length), `vc` (2 bits, VC at the receiving router), `route` (3 bits,
output port at the receiving router), `dest` (x 4 bits, y 4 bits, local
port 2 bits), and a 128-bit `data`. A lookahead (`la_t`) is the same without
`data`.

**Top-level interface** (`nebb_noc`). Node *n* sits on router *n / 4*, at
(x, y) = (r mod K, r / K), local port *n mod 4*.

* A node injects flits on `inj_valid[n]` / `inj_flit[n]`. It chooses the VC
  and fills in `head`, `tail`, `size` and `dest`; the router fills in
  `route`.
* It must count credits for its router's local buffer as described above.
  `inj_credit[n]` returns one credit per flit.
* Flits for the node come out on `ej_valid[n]` / `ej_flit[n]`, and the node
  must take them at once.
* `events[r]` gives per-cycle pulses per input port. They cover LA
  received, LA lost, bypass, bypass over a non-empty VC, VCT bypass, buffer
  write, switch grant and FBFC reservation. They are meant for performance
  counters; the buffered-flit ratio is `buf_write / (buf_write + bypass)`.

## Where this departs from, or adds to, the description

* **Holes of a locked output.** The Hybrid scheme lets other lookaheads use
  the holes of a VCT-locked packet under wormhole rules. The pure VCT
  variant it builds on keeps buffered flits off a locked output. Here
  buffered flits may use the holes as well. Keeping them off deadlocked a
  4 x 4 mesh under load: the locked packet's remaining flits waited upstream
  for credits into the very buffer whose flits waited for the locked output.
* **Own-buffer room for VCT.** The pure VCT variant also requires room for
  the whole packet in the bypassed router's buffer. The Hybrid rule, used
  here, only checks the destination.
* **Injection.** Nodes send no lookaheads, so injected flits always enter
  the buffer. Ejection never back-pressures.
* **Pipeline detail.** The stage split (2 cycles per hop bypassed, 4
  buffered), the registered credit return and the cycle of each decision are
  this implementation's.
* **VCs.** 2 to 4 VCs. The 1-VC minimal-buffering configurations and the
  8- and 16-VC sweeps are not supported, nor are private (non-shared) VC
  buffers.
* **Only the Hybrid mechanism** is built, with priority to lookaheads.
  NEBB-WH alone, NEBB-VCT alone, the conflict-check (no LA arbiter)
  baselines, the Empty-VC baseline and priority to buffered flits are not
  built.
* **FBFC** is applied only when `TORUS=1`. DOR in the torus takes the
  shorter way round, with ties going the positive way.
* **Not designed:** network interfaces, processors, caches and memory
  controllers. Their place is the node interface of `nebb_noc`.

## How far it has been checked

Each block has a self-checking testbench in `tb/` that compares it with an
independent model. Each testbench also fails on a deliberately broken copy
of its block.

* `tb_nebb_router` drives one router through directed cases. It checks
  bypass against buffered latency (1 vs 3 cycles inside the router) and a
  single-flit bypass over a blocked VC. It checks a VCT bypass with holes,
  a conflicting LA and a buffered flit using a hole. It checks a VCT refusal
  when the downstream VC cannot take the whole packet, wormhole bypass of a
  5-flit packet over an empty VC, and two lookaheads for one output.
* `tb_nebb_noc` runs bimodal random traffic through a 4 x 4 mesh and a
  4 x 4 torus (64 nodes each). It checks that every packet arrives at the
  right node, in order and uncorrupted. It also requires each mechanism to
  happen at least once: bypass, bypass over a non-empty VC, VCT bypass, LA
  lost, buffering and FBFC reservation.
* `tb_nebb_noc_full` does the same on the full 256-node mesh with default
  parameters (400 cycles of traffic, then drain).
* `tb_nebb_noc_patterns` runs the evaluated traffic patterns on the full
  8 x 8 mesh, one after another on the same network. The patterns are
  single-flit uniform random, then bimodal bit-reversal, transpose and
  hotspot. The hotspots are nodes 0, 15, 240 and 255.

These tests show that the mechanisms work and that no flit is lost or
corrupted. They do not reproduce latency or power curves: each runs a few
hundred to a few thousand cycles at moderate load. The torus has been
simulated with uniform traffic only. The testbench uses 4 x 4, and
setting `K(8)` on its torus environment runs the full size. Its freedom
from deadlock under sustained saturation has not been shown.

## Simulating

With Verilator 5 (`--timing` for the testbenches):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/nebb_pkg.sv tb/tb_nebb_noc.sv --top-module tb_nebb_noc
./obj_dir/Vtb_nebb_noc
```

The package is named first; `-y` lets Verilator find every other module by
its file name. Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.
`tb/noc_traffic_env.sv` holds the traffic source, the node-side credit
counters and the checker. Its parameters set the network size, mesh or
torus, traffic pattern, load and run length.

A full 256-node network takes a few minutes to build in Verilator and
simulates a few hundred cycles per second. Its storage is 64 routers x 8
ports x 12 slots x 152 bits, about 0.93 Mbit of buffer.
