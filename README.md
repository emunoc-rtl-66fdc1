# EmuNoC transactor: cycle-synchronised hybrid emulation of a network-on-chip

A network-on-chip (NoC) mapped onto an FPGA runs millions of cycles per second, but the traffic
that drives it is easiest to write in software. A *hybrid* emulator therefore lets software on
the FPGA's CPU generate packets and log arrivals, and keeps the RTL of the NoC in programmable
logic. Both sides must agree on time. The NoC may not run ahead of the software's next
injections, and it may not keep running while an arrival has not been reported.

This design does the synchronisation in hardware, with no software round trip per cycle:

* The software sends a **time quantum**: an *injection cycle* plus the packets that enter the
  network at that cycle.
* A **clock halter** lets the NoC run exactly up to that cycle and then stops it.
* The moment any packet has completely arrived, the clock halter **freezes** the NoC. A
  serializer then streams the arrivals back, stamped with the cycle at which they arrived.

The logic follows the architecture of the EmuNoC emulator (Tan et al., FPL 2022). That
publication describes the blocks and how they interact. It leaves out widths, encodings and
handshakes; the choices made here are marked as such below.

```
             s_axis_sp (32)                                                   m_axis_ps (32)
 software ──► sp_injector ──► inject_pe ─► inject_ni ─►┌────────┐─► eject_ni ─► eject_pe ──► ps_ejector ──► software
  (DMA)        │  ▲ stop       (x N)        (x N)      │  mesh  │   (x N)        (x N)         │   ▲
               │  │                                    │  NoC   │                              │   │ ejection
               ▼  │            halting clock / run     │(extern)│                         halt │   │ cycle
            injection cycle ──────────► clock_halter ◄─┴────────┴──────────────────────────────┘   │
            write enable                     └────────────────────────────────────────────────────┘
```

Two clock domains share one global clock. The injector, the FIFO inside each injection PE,
the 1-flit FIFO inside each ejection PE and the ejector always run. The PE state machines, the
network interfaces (NIs) and the NoC run on the *halting clock*. Here the halting clock is a
clock enable, `run`, that every halted flip-flop obeys. This is cycle-for-cycle the same as
gating the clock. The gated clock itself (`halting_clk`) is also provided, for a NoC that must
be clocked rather than enabled.

## Keeping time: quanta, stop and halt

This part is the least obvious. Everything else only moves flits.

The clock halter holds two numbers: the stored **injection cycle** `icyc` and a **counter** of
emulated cycles. Its outputs are:

| signal | value | meaning |
|---|---|---|
| `ctrl` (= `run`) | `counter < icyc && !halt` | the NoC advances one cycle at this clock edge and the counter increments |
| `stop` | `counter == icyc` | the quantum has been emulated; the injector may deliver its packets |
| `ejection_cycle` | `counter` | time stamp sent with every batch of arrivals |

A quantum goes through these steps:

1. The injector takes the first word of a stream transaction, the injection cycle, and writes
   it into the clock halter. It only does so while `stop` is high, so quanta never overlap.
2. `stop` falls and the NoC runs. The counter counts up from its old value to `icyc`. It is
   never reset, so it is an absolute emulated time. Injection cycles must not decrease; an
   assertion checks this.
3. When the counter reaches `icyc`, `stop` rises and the NoC freezes. Only now does the
   injector accept the quantum's packet words. Each one goes into the FIFO of its source PE.
   The FIFOs run on the global clock, so they fill while the NoC is frozen.
4. The next quantum starts the NoC again. In its first emulated cycle, which is cycle `icyc`
   of the previous quantum, the PEs start sending the new packets.

Arrivals interrupt this at any time. When the last flit of a packet reaches its ejection PE,
the PE puts the packet's header into a 1-flit FIFO. The ejector OR-reduces the read-valid flags
of all these FIFOs into `halt`. This forces `ctrl` low from the next edge on. The NoC and the
counter are then frozen, while the injector side keeps working. The ejector drains every full
1-flit FIFO into one stream transaction. When the last one is read, `halt` falls and emulation
continues exactly where it stopped.

All `halt` and `stop` logic is combinational from registers, so the NoC never moves a cycle too
far. The test bench checks this: the number of `run` cycles, the number of `halting_clk`
pulses, the clock halter's counter and the NoC model's own cycle count are always equal.

## Stream formats

Both streams are 32-bit AXI4-Stream. `tlast` closes a transaction. The layout of each word is
this design's choice.

**Packet word:**

| bits | field |
|---|---|
| `[7:0]` | source node id (`y*NOC_X + x`) |
| `[15:8]` | destination node id |
| `[19:16]` | length in flits (0 counts as 1) |
| `[31:20]` | tag, free for software (e.g. to find the copy it kept of the packet) |

**Into the emulator (`s_axis_sp`):** `icyc, packet, packet, ..., packet(tlast)`. A transaction
that holds only `icyc` (with `tlast`) is allowed; it simply runs the NoC up to that cycle.

**Out of the emulator (`m_axis_ps`):** `ejection_cycle, packet, ..., packet(tlast)`. There is one
transaction per halt. It carries every packet that completed in the same emulated cycle. The
packet word is returned exactly as it was sent. The ejection cycle is the counter value once the
halt has taken effect. This is one more than the last cycle in which the NoC and the NIs moved.

## The path of one packet

* **Injector (`sp_injector`)** converts the packet word into a header flit (*conv*). A flit is
  a 2-bit type (head, body, tail, head+tail) plus 32 data bits. The header's data is the packet
  word itself. The injector writes the flit into the FIFO of the PE named by the source field.
* **Injection PE (`inject_pe`)** holds up to `INJ_FIFO_DEPTH` packets. Its state machine sends
  the packet at the head of the FIFO as one stream transaction: the header, then `len-1` dummy
  payload flits. The emulated traffic carries no useful payload. Payload flits hold the tag and
  the flit index, which makes them easy to recognise. The rate is one flit per emulated cycle.
* **Injection NI (`inject_ni`)** assigns each packet to a virtual channel (VC). A round-robin
  arbiter picks among the VCs the router can accept on. The packet keeps that VC up to its tail.
  The NI does not buffer: flits pass straight to the router's local port.
* **NoC.** Not part of this RTL (see below).
* **Ejection NI (`eject_ni`)** has one FIFO per VC, each `MAX_PKT_LEN` flits deep, so a whole
  packet fits. A comparator per VC checks the FIFO count against the length field of the header
  at the FIFO front. A VC whose packet is complete is served by round robin. Its packet goes to
  the PE as one transaction. The NI therefore works store-and-forward: a packet leaves the NI
  only after its last flit has arrived.
* **Ejection PE (`eject_pe`)** keeps the header and drops the payload. On the tail it places
  the header into its 1-flit FIFO. It accepts nothing while that FIFO is full. The NoC is
  halted then in any case.
* **Ejector (`ps_ejector`)** is the single-clock serializer. It contains the OR-reduce that
  produces `halt`, a three-state FSM (idle, cycle word, packet words) and a round-robin arbiter
  over all N FIFOs. A multiplexer drives the FIFO read enables: the arbiter's one-hot grant when
  the stream accepts a word, and all zeros otherwise. The arbiter advances with each word sent.
  The header is converted back into a packet word (*iconv*).

**Latency through an idle NoC.** Take a packet of `L` flits injected at cycle `I`. Suppose the
NoC's first flit takes `D` cycles to cross it, with one flit per cycle after that. The packet is
then reported with ejection cycle `I + D + 2L`: `L` cycles to enter the NoC, `L` cycles to leave
the ejection NI after store-and-forward, plus the halt taking effect. The end-to-end test checks
this exact number with its NoC model (`D = 2*hops + 1`).

## Connecting a NoC

`emunoc_top` brings out the local port of every router as arrays indexed by node id:

| port | direction | per node |
|---|---|---|
| `noc_inj_valid`, `noc_inj_flit`, `noc_inj_vc` | out | a flit for the router's local input, with its VC |
| `noc_inj_ready` | in | one bit per VC: the router can take a flit on that VC |
| `noc_ej_valid`, `noc_ej_flit`, `noc_ej_vc` | in | a flit from the router's local output |
| `noc_ej_ready` | out | one bit per VC: the ejection NI's FIFO for that VC has room |
| `noc_run` / `halting_clk` | out | the NoC advances only when `noc_run` is high (or use the gated clock) |

A flit moves when valid, the ready bit of its VC and `noc_run` are all high at a rising edge.
A router must offer a flit on the ejection side only when `noc_ej_ready` of its VC is high; an
assertion checks this. Routing uses the destination field of the header flit. The flit type
marks packet boundaries (wormhole switching). The original system used existing routers that
can be swapped for any other; this repository contains only a behavioural stand-in,
`tb/noc_model.sv`. It has a fixed latency per hop, one flit per destination per cycle and
whole packets per destination. It is good enough to exercise the transactor, but it is not a
router.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NOC_X`, `NOC_Y` | 13, 13 | largest mesh of the original evaluation (169 routers) |
| `NUM_VC` | 2 | VCs in all evaluated multi-VC configurations |
| `MAX_PKT_LEN` | 5 | 5-flit packets used in the original evaluation; sets the ejection NI FIFO depth |
| `INJ_FIFO_DEPTH` | 16 | this design's choice (smallest depth of common vendor FIFO cores) |
| `CYCLE_W` | 32 | width of the injection and ejection cycle, as in the original clock halter |

The packet word limits a mesh to 256 nodes and packets to 15 flits. To go beyond that, widen
`pkt_t` in `rtl/emunoc_pkg.sv`; the flit data width follows it.

## Departures, choices and limits

* **Clock gating becomes a clock enable.** The original gates the clock with a clock buffer.
  Here all halted logic uses `run` as an enable. `halting_clk` (the clock ANDed with an enable
  that is sampled on the falling edge, so it cannot glitch) is exported for an external NoC.
* **FIFOs.** The original builds its FIFOs from vendor IP. Here a generic first-word
  fall-through FIFO (`sync_fifo`) is used.
* **Injection FIFO overflow is a deadlock, not a drop.** While the NoC is stopped, a full
  injection FIFO cannot drain. So a quantum that pushes more than `INJ_FIFO_DEPTH` outstanding
  packets into one source stalls the input stream forever. Software must stay within that limit.
  The original leaves this case open.
* **Injection cycles must not decrease.** The counter stops only on equality, so an injection
  cycle in the past is never reached. An assertion flags this.
* **Packets complete in the same cycle share one transaction.** The ejector does not report
  separate cycles for them, because the NoC cannot move while they are drained.
* **Not included:** the routers; the scatter-gather DMA that moves the two streams to and from
  memory; the software (packet generation, the copy of every packet kept to match arrivals,
  dependency tracking, logging).

## Files

`rtl/` holds one module or package per file:

| file | contents |
|---|---|
| `emunoc_pkg.sv` | packet and flit types, `conv` / `iconv` |
| `clock_halter.sv` | clock halter |
| `sp_injector.sv` | serial-to-parallel injector |
| `inject_pe.sv` | injection PE |
| `inject_ni.sv` | injection NI |
| `eject_ni.sv` | ejection NI |
| `eject_pe.sv` | ejection PE |
| `ps_ejector.sv` | parallel-to-serial ejector |
| `sync_fifo.sv`, `rr_arbiter.sv` | shared helpers |
| `emunoc_top.sv` | the top level |

`tb/` holds one self-checking test bench per block (`tb_<block>.sv`), plus the NoC stand-in
`noc_model.sv`. Each test bench prints `TB_RESULT checks=N failures=M` and stops itself after
a fixed number of cycles if it hangs.

`tb_emunoc_top` runs the full 169-node design at its default parameters with `noc_model`. It
sends about 40 random quanta, a 9-packet burst from one source and a final drain, and checks
every arrival. It also counts each mechanism and fails if one never happened: injector waiting
for `stop`, ejection halts, multi-packet ejection batches, both VCs in use, and receiver
back-pressure. The case of a full injection FIFO is tested in `tb_inject_pe` and
`tb_sp_injector`. At the top level it would deadlock, as described above.

`tb_uniform_random` runs the synthetic workload of the original evaluation on an 8x8 instance.
Traffic is uniform random: random sources and destinations, 5-flit packets, and a 5% flit
injection rate per node. There is one quantum per emulated cycle that has packets. The test
checks every arrival and prints the global-clock cycles spent per emulated cycle. That is the
hardware's share of the emulation cost; the software's time is not modelled. A typical run
takes about 2.9 global cycles per emulated cycle.

Simulate with Verilator 5 (the package first):

```
verilator --binary --timing --assert --top-module tb_emunoc_top \
    rtl/emunoc_pkg.sv rtl/sync_fifo.sv rtl/rr_arbiter.sv rtl/clock_halter.sv \
    rtl/sp_injector.sv rtl/inject_pe.sv rtl/inject_ni.sv rtl/eject_ni.sv rtl/eject_pe.sv \
    rtl/ps_ejector.sv rtl/emunoc_top.sv tb/noc_model.sv tb/tb_emunoc_top.sv -o sim
./obj_dir/sim
```

Building the full-size top takes about a minute; the simulation itself takes under a second.
For a unit test, replace the last two files with `tb/tb_<block>.sv`. The test benches use
`$urandom`, so pass `+verilator+seed+N` to vary the traffic.
