# A synchronous plastic-fiber network for experiment control

This is the RTL of a small tree network. One host, a set of switches and many endpoints share a
single clock, a packet transport and a trigger. The target is control electronics spread over a
physics experiment, for example in a sounding rocket or a space-station locker. Fibers are used
for galvanic isolation and low weight. The FPGAs are small and cheap, so every part is kept
simple: there are no routing tables, buffers are a few bytes deep, and the serial links need no
transceiver IP.

The central idea is that **every link is bit- and symbol-synchronous to the host, with a phase
that is the same after every start-up.** A trigger symbol sent by the host then reaches every
endpoint after a fixed number of clock cycles. That number can be measured once and corrected
for, so triggers at different boards can be aligned to the clock.

## Network shape

The host sits at the root and drives its links as *master* ports. Each switch has one *slave*
port towards the host (upstream) and seven master ports downstream. An endpoint has one slave
port. A slave derives its clock from the fiber coming from its master; in this RTL, all nodes run
on one simulated clock instead (see "What is modelled and what is not").

Every port has two fibers, and the two directions use different line codes:

| direction | name | line code | rate |
|---|---|---|---|
| master → slave | Tx fiber | each bit takes 3 cycles: `1`, data, `0` | 50 Mbit/s of code bits at 150 MHz |
| slave → master | Rx fiber | NRZ, each bit held for 3 cycles | same |

The `1, d, 0` cell of the Tx fiber gives a rising edge every third cycle. The slave locks its
clock to that edge and samples the data bit in the middle of the cell (`txf_serializer`,
`txf_sampler`). The Rx fiber carries no clock. The master recovers the bits by sampling three
times per bit and re-phasing on each transition (`rxf_serializer`, `rxf_oversampler`).

## Symbols: 8b/10b, commas and control characters

Bytes are sent as 8b/10b code words (`enc_8b10b`, `dec_8b10b`, tables in `code8b10b_pkg`). One
10-bit symbol is sent every 30 base cycles, so the payload rate is 150 MHz / 30 × 8 = 40 Mbit/s.
A link with nothing to send transmits idle symbols. Both idles are commas, K.28.5 and K.28.1.
A comma cannot appear anywhere else in a valid stream, so `comma_align` finds the symbol boundary
by matching the full 10-bit comma pattern. It then cuts every tenth bit after that.

The design uses five control characters. Which 8b/10b code each one gets is a choice of this
design:

| meaning | code | `fiber_pkg` name |
|---|---|---|
| idle, ready to receive | K.28.5 | `SYM_IDLE_RDY` |
| idle, not ready to receive | K.28.1 | `SYM_IDLE_BUSY` |
| start of packet | K.27.7 | `SYM_SOP` |
| end of packet | K.29.7 | `SYM_EOP` |
| trigger | K.28.0 | `SYM_TRIG` |

Inside the RTL a symbol is the struct `sym_t = {k, d[7:0]}`, where `k` = 1 marks a control
character.

## Packets and source routing

```
SOP | {Dst[1],Dst[0]} | {Dst[3],Dst[2]} | {Src[1],Src[0]} | {Src[3],Src[2]} | payload ... | EOP
```

Each `Dst[i]`/`Src[i]` is a 4-bit port number. Within each byte, the first-named nibble is the
high one. Port numbers mean:

- 0 is the node's local device;
- 1..7 are the master ports;
- 15 is the upstream slave port. The original design reserves one address for the upstream port
  but does not say which; 15 is this design's choice.

Every node input has an `addr_rewrite` stage. It holds back SOP and the two destination bytes and
reads the output port from `Dst[0]`. It then emits:

```
Dst' = {0, Dst[3], Dst[2], Dst[1]}        (used nibble removed, zero shifted in)
Src' = {Src[2], Src[1], Src[0], P}        (P = port number of this input)
```

and passes the rest of the packet through unchanged. The header costs two symbols of latency
per hop; after that the packet streams, so packets can be of any length. A packet whose `Dst[0]`
is 0 has arrived. Its `Src` field now holds the path back, so an answer needs no routing table:
the receiver copies the received `Src` into the answer's `Dst`. A worked example from the
end-to-end test:

```
host local → host port 1 → switch port 7 → endpoint local   Dst = 0x0071
  arrives at the endpoint with Src = 0x00FF   (0 = host local, F = switch upstream, F = endpoint upstream)
answer with Dst = 0x00FF
  arrives at the host with Src = 0x0071
```

Four nibbles allow four hops. Each switch can address up to 14 downstream devices.

`pkt_crossbar` connects the rewrite stages to the outputs. Arbitration is round robin per
output, and a grant lasts from SOP to EOP, so packets never interleave. A packet for a port that
does not exist is discarded; the host drops addresses above 7, the switch drops 8 to 14. The
switch adds an 8-symbol queue before each of its outputs (`sync_fifo`); the endpoint has none.

## Flow control

Every port has a 16-entry receive buffer. When it holds 8 or more symbols, the port sends
"not ready" idles; once it has drained to 4 or fewer, it sends "ready" idles again. When the
buffer changes state, the port sends the new idle at the next symbol slot, even if data is
waiting. After a "not ready" idle arrives, the far end stops sending data until a "ready" idle
comes back. The signal travels from hop to hop, so one stalled device slows the path back to its
source. Nothing is lost on the way.

Each port's transmit mux picks, per 30-cycle symbol slot:

1. a pending trigger;
2. else a pending flow-control idle (if the buffer state changed);
3. else data, if the far end is ready;
4. else an idle showing the current buffer state.

Between crossing the high mark and the far end stopping, only a few more symbols can arrive:
the ones already on the wire and in the pipeline. The 8 entries above the mark leave room for
them, and no test ever overflows a buffer. `ovf_o` and an assertion in `sync_fifo` would report
an overflow.

## The trigger and why its delay is constant

A trigger is a control symbol that may be sent in any symbol slot, even in the middle of a packet.
It is not queued behind data: it takes the very next slot of the port. When a slave port decodes
it, `trig_o` pulses at a fixed point of the receive pipeline. A switch sends that pulse straight
into the trigger request of all its master ports and to its SMA debug output. An endpoint starts
its `trigger_unit` with it: each of the 10 lines can be enabled, waits its own programmed delay,
and then pulses for a set width.

This alone would give a delay that changes from one start-up to the next. A switch's master ports
send a symbol every 30 cycles, but at some phase against the symbols arriving from upstream, so
the trigger would wait between 0 and 29 cycles for a slot. The fix is in `switch_node`: when the
upstream link first aligns, the switch restarts the transmit framing of all its master ports. It
does this once, on the next received symbol boundary, through the `resync_i` input of
`txf_serializer`. After that, the downstream symbol slots keep a fixed phase to the upstream
slots, and the forwarding delay is the same after every reset of the switch or of its master.
The host's ports run free from reset; they are the reference.

Measured in simulation (base clock cycles):

| path | cycles |
|---|---|
| trigger symbol loaded at a master port → `trig_o` at the slave | 35 |
| host trigger loaded → switch SMA output rises | 36 |
| host trigger loaded → endpoint trigger line with delay 0 rises | 72 |

The end-to-end test checks that these numbers do not change over 11 triggers and 3 power cycles
of the switch and the endpoint, with the resets released at different phases.

## Nodes

- **`fiber_port`** is one complete interface. `IS_MASTER` chooses the line codes: Tx-fiber
  transmit with Rx-fiber receive on a master, the reverse on a slave. It contains the encoder,
  decoder and comma alignment, trigger insertion and detection, the flow-control idles, and the
  receive buffer. `link_up_o` rises once bit lock (slave) and symbol alignment are reached.
- **`host_node`** has seven master ports and a local stream port (0) for the processor that
  bridges Ethernet into the network. `trig_req_i` puts a trigger on all ports in the same slot.
- **`switch_node`** has one upstream slave port, `N_DOWN` = 7 master ports and a local stream
  port (0). It contains the crossbar, the output queues, the framing resync and the SMA pulse
  stretcher. `fabric_wait_o` and `flow_stop_o` show contention and back pressure.
- **`endpoint_node`** has one slave port, a local stream port and the trigger unit.
- **`fiber_network`** is the top level. It wires the test setup of the original work: host
  port 1 to the switch upstream port, and switch port 7 to the endpoint. Spare fibers are
  brought out to pins. Each node has its own reset so that power cycles can be simulated.

All local stream ports use valid/ready handshakes carrying `sym_t`. A transfer happens in a cycle
where both are high. A link moves at most one symbol per 30 cycles, so `tx_ready` is a one-cycle
strobe once per slot.

## What is modelled and what is not

- **Clocks:** all nodes run on one clock. On the hardware, a PLL locks each slave onto its
  master, and the phase between boards is analog (about 7.6 ns from host to switch, with a
  jitter of tens of picoseconds). None of that is in the RTL; here the slave locks digitally onto
  the Tx-fiber rising edge.
- **Fibers:** the transceivers are plain wires.
- **Behind the local ports:** the host's processor and its Ethernet/TCP stack, the switch
  configuration and monitoring, and the application protocol (reads of a firmware ROM) are not
  part of this RTL. Their stream interfaces are brought out as ports.
- **Sizes that the original work does not give:** the host's port count, the buffer depth and
  marks, the queue depth, the trigger delay width, the SMA pulse length and the control-character
  codes were chosen here. All are parameters or package constants.
- **8b/10b decoding:** invalid code words are flagged, but running-disparity errors are not
  checked.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. The two packages must be compiled first:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/code8b10b_pkg.sv rtl/fiber_pkg.sv tb/tb_fiber_network.sv --top-module tb_fiber_network
./obj_dir/Vtb_fiber_network
```

`tb_fiber_network` runs the whole network with all parameters at their defaults, in about
3 s of simulation. It exercises and counts the following:

- routed packets and the answers to them;
- packets to and from the switch's local device;
- a dropped packet;
- two packets meeting in the switch fabric;
- an endpoint that stops reading, which pushes back through the switch;
- triggers, including ones in the middle of a packet, and after power cycles;
- the payload rate of a 2000-byte packet, measured at 29.98 cycles per byte (40.0 Mbit/s).

Two more testbenches repeat the measurements of the original work at the default sizes:

- **`tb_data_rate`** sends single packets of 4 to 4096 payload bytes on three paths. It measures
  the time from the host taking SOP to EOP arriving at the destination. Rate counts payload only,
  at 150 MHz:

  | payload bytes | 4 | 16 | 64 | 256 | 1024 | 4096 |
  |---|---|---|---|---|---|---|
  | host → endpoint (direct link) | 14.4 | 27.6 | 35.9 | 38.9 | 39.7 | 39.93 |
  | host → switch local device | 14.2 | 27.6 | 35.9 | 38.9 | 39.7 | 39.93 |
  | host → switch → endpoint | 10.4 | 23.5 | 34.0 | 38.3 | 39.6 | 39.89 |

  All rates are in Mbit/s. Each packet carries six symbols of overhead: SOP, four header bytes
  and EOP. Delivery time adds to this: the
  switch hop costs about 130 cycles more (link, header hold-back, queue). So small packets
  are slow, and the two-hop path is slowest. The rate approaches the 40 Mbit/s line limit. The original
  hardware peaked at 39.92 Mbit/s with very large packets; it has a processor and Ethernet in
  the path, which this RTL does not model.
- **`tb_trigger_5000`** sends 5000 triggers at random times, most of them while packets are
  flowing. It power-cycles the switch and the endpoint four times along the way. Every trigger
  reaches the SMA output after exactly 36 cycles, and endpoint line *l* after 72 + 37·*l*
  cycles, with the test's delays of 37·*l*.

There is one testbench per module (`tb_<module>`). Among what they check:

- the encoder against the code tables and the disparity rules;
- every valid and invalid code word through the decoder;
- bit cells and cycle counts of both line codes, at all sampling phases;
- comma alignment and realignment;
- the address rewrite against an independent model;
- crossbar fairness;
- trigger delays to the cycle;
- link latency, 30-cycle throughput and flow control of a port pair;
- trigger latency of a switch before and after a reset.
