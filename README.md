# A configurable FPGA switch for custom network protocols

Many small networks, such as trading clusters, robot swarms, factory buses and
underwater links, do not need Ethernet. They need a switch that understands
their own compact header and is sized for their own traffic. This RTL is one
switch template whose parts can be swapped. The parts are:

* where the routing fields sit in the header;
* how the forwarding table is organised;
* how packets are buffered in front of the crossbar;
* how the crossbar is scheduled.

Each choice is a parameter of the top module `spac_switch`. The stages talk
through one common interface, so any combination composes without glue logic.
The defaults describe a general-purpose Ethernet switch:

* 8 ports, a 512-bit datapath and 48-bit MAC addresses;
* a banked hash forwarding table;
* one FIFO per input/output pair;
* iSLIP scheduling.

The template follows the SPAC approach to protocol-adaptive switches (Li et
al., "SPAC: Automating FPGA-based Network Switches with Protocol Adaptive
Customization"). That work generates the switch from an HLS template. The code
here is an independent SystemVerilog rendering of the hardware it describes.
The internals are this design's own wherever the published description stops
at what a block does. Section "Departures and open points" lists where that
happens.

## Packet path

```
 s_axis[i] ─► parser ─► ingress ─► VOQ buffer[i] ═╗             ╔═► deparser ─► m_axis[j]
              (fields)   │   ▲     (per input)    ║  crossbar   ║   (writes the
                         ▼   │                    ╚═════════════╝    fields back)
                     forward table  ◄─ shared by all ports ─►    ▲
                     (lookup dst,                                 │
                      learn src)              scheduler ─ grants ─┘
```

Every port moves one flit per cycle. A flit is 512 data bits, 64 byte enables
and a last flag. It travels with a meta record: destination address, source
address and ingress port. The meta is produced by the parser and stored beside
every flit in the VOQ. It comes back out at the deparser. This record is the
side channel that lets stages be swapped. The forward table, for example, sees
only the meta and never the raw header.

The types live in `spac_pkg`: `flit_t`, `meta_t`, `word_t` (a flit plus its
meta), the policy enums, and a small round-robin helper. `DATA_W` is a package
constant, not a top-level parameter, because every block shares the flit type.
Changing the bus width means editing the package.

## Header fields at fixed offsets (`spac_parser`, `spac_deparser`)

A custom protocol is described by two numbers: the bit offset of each
addressing field and the field width. The parser takes these as parameters
(`DST_OFF`, `SRC_OFF`, `FIELD_W`). It does not interpret the header at run
time.

* Header bit *b* is bit *b* mod 512 of flit *b* / 512.
* A field that lies wholly in the first flit becomes a plain wire slice. The
  parser then adds a single register stage and never stalls.
* A field that lies beyond the first flit or straddles a flit boundary needs
  state. The parser then elaborates a small buffer that holds the header flits
  until the last field byte has arrived. It then releases them with the meta
  attached.

Which case applies is decided at elaboration from the offsets. The hardware
for the simple case carries no trace of the other.

The deparser is the mirror image. It buffers up to four words. On the way out
it writes the meta's destination and source back into the header at the same
offsets. A stage that rewrites the meta, for example a future address
translation, therefore changes the packet on the wire. With unchanged meta the
packet leaves bit-identical.

For a 2-byte compressed header, set `FIELD_W=8`, `DST_OFF=0` and `SRC_OFF=8`.

## Forwarding tables

Each input asks the table two things per packet: where the destination is, and
that the source now lives on this port (learning). Both go in one request. The
ingress controller turns the answer into a destination mask:

* a hit gives a one-hot mask;
* a miss floods to every port but the ingress port.

### Direct-index table (`spac_fwd_full_lut`, `FWD_FULL_LUT`)

The low `LUT_IDX_W` address bits index a register array of {valid, port}. The
array has N read ports and N write ports, so all inputs are served in the same
cycle. The answer arrives one cycle after the request. Learning writes take
effect after the lookups of the same cycle. If two ports learn the same
address in one cycle, the higher port wins.

This table is only sensible for short addresses. The array has 2^`LUT_IDX_W`
entries, 256 at the default.

### Multi-bank hash table (`spac_fwd_hash`, `FWD_MULTI_HASH`)

This is the part of the design with the most moving pieces.

Storage is `HASH_BANKS` banks of `HASH_ROWS` rows. Each row holds
{valid, full address, port}. Two hash functions place an address:

* the bank is the XOR-fold of the whole 48-bit address down to log2(banks)
  bits;
* the row is the XOR-fold of the address bits above the bank bits, down to
  log2(rows) bits.

A lookup hits only when the stored address matches. A learn overwrites its
row. There are no ways or chaining: a colliding address evicts the older one.
The next packet from the evicted host is flooded and then relearned.

Each bank serves one lookup and one learn per cycle. A request therefore needs
two bank accesses: the bank of its destination and the bank of its source.
Each bank has two round-robin arbiters, one for lookups and one for learns,
with rotating priority pointers. A request records which of its two accesses
it has already won (`lk_done`, `ln_done`). It keeps asking for the one it has
not. It is accepted (`req_ready`) in the cycle its second access is granted,
and the response follows one cycle later. `conflict[i]` is high in every cycle
a request waits. The top reports it as the `ev_fwd_stall` event.

With eight banks and eight ports, inputs that address different banks never
wait. Same-bank requests are served in rotating order, so no port starves.

## VOQ buffers

Every input owns one buffer instance with one logical queue per output. This
removes head-of-line blocking: a packet for a busy output never holds back a
packet for an idle one. Both variants share one interface:

* a write port with a destination mask;
* per-queue `space_ok`, `pkt_avail` and `pkt_more` flags;
* a read port that selects a queue and sees its head word combinationally.

Both are store-and-forward. A queue reports a packet only once its last flit
is stored, so the crossbar never starts a packet it cannot finish.

Admission is decided before the first flit is written. The ingress stage
checks `space_ok` on every queue in the mask. `space_ok` means at least
`MAX_PKT_FLITS` (24) free words, enough for a 1518-byte frame at 512 bits. If
any queue lacks room, the whole packet is dropped (`ev_drop`). A queue
therefore never overflows and never holds a partial packet.

### N×N queues (`spac_voq_nxn`, `VOQ_NXN`)

Each queue is a separate FIFO of `NXN_DEPTH` words. A broadcast is written into
every queue of its mask in the same cycle, so the data is copied. The queues
are independent arrays, so a write and a read of different queues never
interact.

### Shared buffer (`spac_voq_shared`, `VOQ_SHARED`)

A word is stored once, however many outputs want it. The structures are:

* `data`: the word store, with `SHARED_DEPTH` entries;
* `bitmap`: one bit per output, for the outputs that still have to read that
  word;
* `free_q`: a FIFO of free addresses, filled with every address at reset;
* one pointer FIFO per output: the word addresses queued for that output.

A write works in this order:

1. Pop a free address.
2. Store the word there.
3. Set the word's bitmap to the destination mask.
4. Push the address onto the pointer FIFO of every output in the mask.

A read pops the selected output's pointer and clears that output's bit. When
the bitmap becomes zero, the address returns to the free FIFO.

`space_ok` is computed from the free count, so all queues share the space.
This makes a broadcast as cheap as a unicast. The cost is the pointer
bookkeeping.

## Scheduling and the crossbar

The crossbar (`spac_crossbar`) holds one connection per input: a valid bit and
an output number. A connection lasts for a whole packet. While it is up, the
input pops one word per cycle whenever the output's deparser has room. On the
last flit the connection is released. Both ports are offered to the scheduler
again from the next cycle. So between two packets of different pairs an
output is idle for one cycle.

The scheduler sees three inputs:

* `req[i][j]`: input *i* holds a complete packet for output *j*;
* which inputs are unconnected;
* which outputs are unconnected.

It proposes new connections for the current cycle. All three schedulers share
this interface.

* **Round robin** (`spac_sched_rr`). In round *r*, input *i* may only connect
  to output (*i* + *r*) mod N. The round advances every cycle. Each round is a
  permutation, so there are never collisions and the logic is tiny. The cost
  is that a waiting pair may wait up to N cycles for its turn.
* **iSLIP** (`spac_sched_islip`, `ISLIP_ITERS` iterations, default 1).
  1. Request: every free input requests all outputs it has packets for.
  2. Grant: every free output grants the first requesting input at or after
     its grant pointer.
  3. Accept: every input accepts the first granting output at or after its
     accept pointer.

  Further iterations fill in pairs still unmatched. Pointers move only for
  first-iteration accepts, to one past the partner. This is the
  desynchronising rule that gives iSLIP its fairness. All iterations are
  unrolled combinationally in one cycle.
* **EDRRM** (`spac_sched_edrrm`). There are two phases.
  1. Request: each free input sends a single request, to the first non-empty
     queue at or after its request pointer whose output is free.
  2. Grant: each output grants one requester from its grant pointer.

  A grant is final, and both pointers move one past the partner. EDRRM's
  second half is exhaustive service, and it lives in the crossbar. The top
  sets `EXHAUSTIVE=1` on the crossbar when EDRRM is chosen. A connection then
  stays up while its queue still holds another complete packet (`pkt_more`).
  Packets of one pair leave back to back with no idle cycle. This suits bursty
  traffic such as gradient exchange, at some cost in fairness.

## Ingress control (`spac_ingress`)

One small controller per input sits between parser and VOQ. It has four
states:

1. IDLE: send the first flit's meta to the forward table.
2. WAIT: take the response.
3. FWD: write the packet into the VOQ, one flit per cycle.
4. DROP: discard it.

A packet whose destination lives on its own ingress port is filtered
(`ev_filter`), because the host has already seen it. A miss raises
`ev_bcast`. While the controller waits or drops, the parser is back-pressured
through `s_axis_tready`. The controller adds two cycles per packet, so a
stream of one-flit packets runs at a third of line rate. Packets of 3 flits or
more keep a port above 60 %. For 24-flit frames the port measures 0.92
flits/cycle.

## Timing and measured behaviour

At the defaults the switch has:

* a port-to-port latency of 7 cycles for an uncontended one-flit packet, from
  the first input flit accepted to the first output flit valid;
* the same for longer packets plus their length, because it is
  store-and-forward;
* a sustained rate of 936 flits in 1014 cycles for one port streaming 24-flit
  packets to another.

The reference implementation reports 68.3 ns at 146 MHz for this
configuration. That is about 10 cycles, and 74.7 Gbps is one 512-bit flit per
cycle at 146 MHz.

No timing closure has been attempted here. The longest combinational paths
are:

* the unrolled iSLIP iterations;
* the per-bank arbiters of the hash table;
* the N-way output multiplexers of the crossbar.

## Configurations for the evaluated applications

| application | ports | table | VOQ | scheduler | header / packet | packet in 512-bit flits |
|---|---|---|---|---|---|---|
| Ethernet (default) | 8 | hash | N×N | iSLIP | 14 B / up to 1518 B | up to 24 |
| HFT | 8 | direct | N×N | RR | 2 B / 26 B | 1 |
| RL training | 8 | direct | N×N | EDRRM | 2 B / 1465 B | 23 |
| Datacenter | 32 | hash | shared | iSLIP | 4 B / 970 B | 16 |
| Industrial control | 10 | direct | shared | RR | 2 B / 61 B | 1 |
| Underwater robots | 8 | direct | shared | RR | 2 B / 4 B | 1 |

The reference work also used 128-, 256- and 1024-bit buses for some of these.
Here all run on the 512-bit datapath, since the width is a package constant.
Port counts up to 32 are supported (`PORT_W` = 5).

## Departures and open points

These behaviours are this design's own: the published description gives what
the block does but not how.

* The hash functions, bank and row counts (8 × 64), and the conflict arbiter.
* The direct table's index width (8).
* Queue depths: 64 words per N×N queue, 256 words per shared buffer.
* The whole-packet drop rule.
* Flooding to all ports but the ingress port.
* Own-port filtering.
* The one-cycle gap between packets.
* Storing the meta beside every flit, which costs about 100 bits per buffered
  word. A real implementation could store it once per packet.
* The deparser writing fields back.

Three other points differ from the reference work:

* The bus width is fixed per build rather than per configuration.
* The round-robin scheduler advances its rotation every cycle. The reference
  describes a rotation that may take up to N cycles to reach a pair, and the
  same bound holds here.
* The reference text describes Ethernet headers compressed from 14 to 2
  bytes. For the underwater case it also mentions packets compressed to 4
  bytes in total. The table above takes the 4 bytes as header plus payload.

Not included:

* The PHYs. They attach to the AXI-Stream ports.
* The injection point for user kernels after the parser. The meta/flit
  interface between parser and ingress is where one would go.
* The protocol compiler, the design-space exploration and the network
  simulators of the reference work. Those are software.

## Files

| file | contents |
|---|---|
| `rtl/spac_pkg.sv` | types, constants, policy enums, round-robin helper |
| `rtl/spac_parser.sv` | field extraction at elaboration-time offsets |
| `rtl/spac_ingress.sv` | per-input lookup/learn/flood/filter/drop controller |
| `rtl/spac_fwd_full_lut.sv` | direct-index forwarding table |
| `rtl/spac_fwd_hash.sv` | multi-bank hash forwarding table |
| `rtl/spac_voq_nxn.sv` | one FIFO per input/output pair |
| `rtl/spac_voq_shared.sv` | shared word store with pointer queues and bitmaps |
| `rtl/spac_sched_rr.sv`, `spac_sched_islip.sv`, `spac_sched_edrrm.sv` | schedulers |
| `rtl/spac_crossbar.sv` | connection state, VOQ reads, output multiplexing |
| `rtl/spac_deparser.sv` | output buffer, field write-back |
| `rtl/spac_switch.sv` | top level |

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each testbench
prints `TB_RESULT checks=… failures=…` and has a cycle watchdog.

`tb/tb_spac_switch.sv` runs the default switch end to end through these
phases:

1. latency;
2. learning floods;
3. own-port filtering;
4. 1500 random packets with output stalls;
5. a throughput stream;
6. an incast into a blocked port.

It counts every mechanism: flooding, filtering, drops, hash conflicts, egress
stalls, ingress back-pressure, and bypass of a blocked output. Each must have
occurred.

`tb/tb_spac_workloads.sv` instantiates the switch five times, in the
configurations of the table above. It drives each one through
`tb/tb_spac_wl_run.sv` with that application's packet size and a uniform or
gather/scatter pattern. It checks every packet and the exhaustive back-to-back
service of EDRRM.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/spac_pkg.sv rtl/spac_*.sv tb/tb_spac_switch.sv \
    --top-module tb_spac_switch -o sim && obj_dir/sim
```

List `spac_pkg.sv` first; the shell glob lists it again, which Verilator
tolerates. Use the same pattern for any block testbench. For the crossbar
testbench, add `tb/tb_spac_crossbar_run.sv`. For the workloads testbench, add
`tb/tb_spac_wl_run.sv`.

The default switch testbench runs in well under a minute. The workloads
testbench takes about two minutes, most of it compiling the 32-port instance.

To build a variant, override the top's parameters, for example:

```
spac_switch #(.N_PORTS(10), .FWD_KIND(FWD_FULL_LUT), .VOQ_KIND(VOQ_SHARED),
              .SCHED_KIND(SCHED_RR), .FIELD_W(8), .SRC_OFF(8)) u_sw (...);
```
