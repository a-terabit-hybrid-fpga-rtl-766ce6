# VLAN-steered switch virtualization: ASIC side of a hybrid FPGA-ASIC SoC

Several tenants each want their own programmable switch, with their own
protocols and tables, but they share one box and one set of 100G ports. This
design splits that box in two. The reconfigurable part is an FPGA fabric with
26 slots. Each slot holds one tenant's virtual switch (vS), which can be
anything from a wire to a router. The fixed part is ASIC logic. It holds every
queue, decides which vS sees a packet, and decides which port a vS may send
that packet to. Tenants are separated by 802.1Q VLAN. Two tables, written by an
external control processor, map (VLAN, ingress port) to a vS, and
(VLAN, vS) to a TX port. The RTL here is the ASIC part: the queues,
multiplexers, the two steering units and the management interface. The vS
slots, the PHYs and the control software connect to it through ports.

The structure and sizes (32 lanes, 26 vS, 118 queues of 66 x 417 and
52 x 289 bits, 146-bit management channels) follow the published description
of the platform. The word layouts, table formats, arbitration, handshakes and
most timing details are not published. They are choices made here, and each
module's opening comment says which is which.

## The path of a packet

```
 rx lane 0..31 --[RX queue]--+
 vRX ------------[vRX queue]-+--> RR mux --> IPI --> demux --[vS in queue d]--> vS d
                                                                                  |
 tx lane 0..31 <--[TX queue]--+                                                   |
 vTX (loops to vRX) <-[vTX q]-+-- demux <-- OPI <-- RR mux <--[vS out queue d]---+
```

1. A PHY writes AXI-Stream words into its RX queue, using its own lane clock.
2. `axis_rr_mux` takes whole packets from the 33 ingress queues in
   round-robin order (32 lanes plus the virtual vRX). It tags each word with
   the number of the queue it came from. That number is the ingress port.
3. `ipi` (Input Port Interface) reads the VLAN tag from the first word. It
   looks up the Ingress table and either names a vS or drops the packet.
4. `axis_demux` writes the packet into the input queue of that vS. This queue
   crosses into the FPGA clock domain.
5. The vS processes the packet and writes it into its output queue.
6. A second round-robin mux takes whole packets from the 26 vS output queues.
   The number of the queue it serves is the vS's device id, so no metadata has
   to travel through the vS.
7. `opi` (Output Port Interface) looks up (VLAN, device id) in the Egress table
   and either names a TX port or drops the packet. So a vS can only reach the
   ports its tenant's entries allow. Port 32 is the virtual vTX.
8. A demux writes the packet into the TX queue of that port, and the PHY reads
   it with its lane clock. The vTX queue feeds the vRX queue directly. A packet
   sent there re-enters the IPI as coming from port 32. This lets one packet
   pass through two vS in turn (loopback switching).

All 118 queues are dual-clock: 32 RX + vRX, 26 vS in, 26 vS out, and
32 TX + vTX. The core runs on `clk` (1 GHz in the target process), the vS
array on `fpga_clk` (718.4 MHz in the reported FPGA results), and each lane on
its own clock.

## Word formats

| word | bits | fields (MSB first) |
|---|---|---|
| lane word (`lane_word_t`), RX/TX/vRX/vTX queues | 417 | tdata 256, tkeep 32, tuser 128, tlast 1 |
| vS word (`vs_word_t`), vS queues | 289 | tdata 256, tkeep 32, tlast 1 |
| management word (`mi_word_t`) | 146 | op 2, tgt 3, dev 5, addr 8, data 128 |

Only the totals 417, 289 and 146 come from the platform description. Reading
417 as 256 + 32 + 128 + 1 (a NetFPGA-style AXI-Stream beat) is what makes 289
equal the same beat without tuser. Byte *i* of a frame is in
`tdata[8i+7:8i]`, so the 802.1Q TPID is bytes 12-13 and the VLAN id is the low
12 bits of bytes 14-15. The IPI ignores the tuser of incoming words. The OPI
writes tuser[5:0] = TX port and tuser[12:8] = device id, and the rest zero.

## Steering tables

Both tables are register arrays with 32 entries (`IG_ENTRIES`, `EG_ENTRIES`).
All entries are compared in parallel against the first word of a packet, and
the lowest-numbered hit wins. The decision holds for the whole packet. A
dropped packet's words are consumed at one per cycle and go nowhere.

**Ingress** (`ig_entry_t`, 51 bits): `{valid, vid[11:0], port_mask[32:0], dev_id[4:0]}`.
An entry hits when `vid` equals the packet's VLAN id and the bit of the ingress
port is set in `port_mask`. The port is part of the key so that two vS can
share a VLAN as long as they are fed from different ports.

**Egress** (`eg_entry_t`, 24 bits): `{valid, vid[11:0], dev_id[4:0], tx_port[5:0]}`.
An entry hits when both the VLAN id and the device id match.

A packet is dropped in either unit when it is untagged, when no entry hits, or
when the hit names a vS or port that does not exist. Each unit counts packets
seen, forwarded, dropped as untagged and dropped on a miss, in four 32-bit
counters.

## Dual-clock queues of any depth (`async_fifo`)

The queue depths are 66 and 52, neither a power of two. This is the least
standard part of the design. Each side counts its pointer modulo 2·DEPTH, so
"full" (difference DEPTH) and "empty" (difference 0) are told apart without an
extra bit. A pointer crossing a clock boundary must change in only one bit per
step. An ordinary Gray code of a count modulo 2·DEPTH does not do that at the
wrap.

The fix uses the mirror symmetry of the reflected Gray code. Let k = clog2(DEPTH).
The codes of 2^k − 1 − i and 2^k + i differ only in the top bit. So the 2·DEPTH
consecutive codes from 2^k − DEPTH to 2^k + DEPTH − 1 form a cycle in which
every step changes exactly one bit, including the step from the last code back
to the first. A count c is therefore sent as `gray(c + 2^k − DEPTH)`. The
receiver converts it back to binary and subtracts the offset. For DEPTH = 66
the codes are 8 bits wide with offset 62, and for DEPTH = 52 they are 7 bits
wide with offset 12. An assertion on each side checks the one-bit rule.

Two flip-flops synchronize each crossing pointer. The read is fall-through:
`rdata` shows the head word whenever `rvalid` is high. A word written into an
empty queue shows up after 2 to 3 read-clock edges. Freed space reaches the
writer with the same delay, so a queue can look full for up to 3 write clocks
after it was read.

## Arbitration, back-pressure, and a loop to keep unsaturated

Every hop uses valid/ready, and nothing is ever dropped for lack of space. A
full TX queue stops the OPI demux. That backs up the vS output queues, then
the vS, the vS input queues, the IPI, and finally the RX queues, whose
`rx_ready` falls. Each demux holds one word in a register and stalls only when
that word's own destination is full. Each mux grants whole packets, so a
packet's words are never interleaved with another's.

Because of this the virtual channel forms a closed loop:
OPI → vTX → vRX → IPI → vS → OPI. The loop can deadlock. Suppose the vTX and
vRX queues are full, and the IPI is blocked on the input queue of a vS whose
output is waiting on vTX. Then none of them can move. The published
description does not say how loopback traffic is flow-controlled, and this RTL
adds nothing for it. Software must keep loopback traffic below the loop's
buffering: 2 × 66 + 2 × 52 words plus pipeline registers. A design that needs
more could drop at vTX, or reserve vS queue space for traffic coming from vRX.

## Management interface (`mgmt_if`)

One 146-bit command channel comes in from the control processor, and one
146-bit answer channel goes back. 26 command channels go out, one per vS, and
26 answer channels come back. All run on `clk`; the vS wrapper must move them
into the fabric clock domain.

| op | tgt | effect | answer |
|---|---|---|---|
| WRITE/READ | INGRESS (0) | write/read Ingress entry `addr` (data = entry) | data 0 / the entry; all-ones if `addr` ≥ 32 |
| WRITE/READ | EGRESS (1) | same for the Egress table | same |
| READ | COUNTER (3) | addr 0-3: IPI counters, 4-7: OPI counters | the count |
| WRITE/READ | VS (2) | word passed unchanged to vS `dev` | whatever the vS answers, with `dev` set to the vS; all-ones at once if `dev` ≥ 26 |

An answer copies the command header with op = RESP (3). The MI's own answers
have priority over vS answers, and vS answers are taken round robin. A table
write takes effect at the clock edge that accepts the command.

## Departures and open points

- **Throughput.** The platform is described as carrying 3.2 Tb/s through one
  IPI and one OPI. At one 256-bit word per 1 GHz cycle, each carries
  256 Gb/s. The figure and text show a single serializing mux in front of a
  single parser, and this RTL builds that. How the published design reaches the
  terabit rate through it is not explained.
- **Head-of-line blocking.** The OPI forwards "as soon as the TX port is
  available" by waiting for it: when the chosen TX queue is full, the OPI and
  every vS behind the mux wait, even if their own ports are free. Avoiding
  that would take a lookup before the mux grant, or per-port output queues
  inside the OPI.
- **Queue storage.** The target process stores the lane queues in compiled
  single-port SRAM: three 64 x 144 macros per queue. That is 64 words against a
  stated depth of 66, and a 284-macro total that does not follow from 66 queues
  × 3. Here every queue is a register array with one write and one read port,
  at the stated depths of 66 and 52. To use SRAM macros, replace the `mem`
  array in `async_fifo`. A single-port macro also needs read/write
  arbitration, which is not described.
- **Table sizes** (32 entries each) and the entry formats are choices made
  here. Nothing is published about them.
- **Reset.** One asynchronous active-low reset serves all clock domains. Its
  release must be synchronized to each clock outside this block.
- **Not included:** the vS pipelines and the FPGA fabric, the 100G PHYs and the
  logic on their side of the lane queues, the SRAM macros, and the control
  software.

## Files

`rtl/` (synthesizable, one unit per file):

| file | contents |
|---|---|
| `vsw_pkg.sv` | sizes, word and table-entry structs, management enums, VLAN parse function |
| `async_fifo.sv` | dual-clock queue, any depth |
| `axis_rr_mux.sv` | packet round-robin mux with source index |
| `axis_demux.sv` | registered packet demux |
| `ipi.sv` | VLAN parse + Ingress table + counters |
| `opi.sv` | VLAN parse + Egress table + counters |
| `mgmt_if.sv` | command decode, table access, vS relay |
| `vswitch_soc.sv` | top: 118 queues, 2 muxes, 2 demuxes, IPI, OPI, MI, loopback |

Parameter defaults are the platform's sizes. The top takes `NUM_PHY` (32),
`NUM_VS` (26), `LANE_DEPTH` (66), `VS_DEPTH` (52), `IG_ENTRIES` and
`EG_ENTRIES` (32). The widths of port and vS indices in `vsw_pkg` (6 and 5
bits) cap `NUM_PHY` at 62 and `NUM_VS` at 32.

`tb/`: one self-checking testbench per unit (`tb_async_fifo`,
`tb_axis_rr_mux`, `tb_axis_demux`, `tb_ipi`, `tb_opi`, `tb_mgmt_if`), the
end-to-end `tb_vswitch_soc`, and the rate run `tb_platform_rate`.
`tb_pkt_pkg.sv` builds frames, and `vs_model.sv` is a pass-through vS with a
few control registers.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    --top-module tb_vswitch_soc rtl/vsw_pkg.sv tb/tb_pkt_pkg.sv tb/tb_vswitch_soc.sv
./obj_dir/Vtb_vswitch_soc
```

Replace the top module name to run another testbench. Each one prints
`TB_RESULT checks=N failures=M` and stops. Verilator has only two states, so
the testbenches initialize everything they read.

`tb_vswitch_soc` runs the whole SoC at its default size in well under a
second. It configures 31 Ingress and 30 Egress entries through the management
channel and reads a vS register back through it. It then sends about 500
random frames over the 32 lanes. A reference model predicts each frame's TX
port, or whether it is dropped. Each frame must arrive exactly once,
unchanged, in order per (lane, port), with the right tuser. The test counts,
and requires at least once, each of these events:

- forwarding
- an untagged drop
- an ingress miss
- an egress drop
- loopback through vTX/vRX
- contention at the input mux
- a full TX queue stalling the OPI
- back-pressure reaching the RX lanes

Finally it compares the IPI and OPI counters, read through the management
interface, with the model. The unit testbenches also check cycle timing:
one-cycle latency in the IPI, OPI and demux, and one word per cycle through
the mux with strict rotation. `tb_async_fifo` checks a 2 to 3 edge crossing
delay and a capacity of exactly 66 words.

## Measured rate

`tb_platform_rate` loads all 32 lanes at 100 Gb/s each (back-to-back
1024-byte frames, 256 bits per 390.625 MHz lane clock), with every TX lane
ready. It repeats this for 26, 17, 14 and 11 active vS, the populations of the
four case-study switches (L2 switch, firewall, router, INT) in the reported
FPGA results. In every case both the IPI and the OPI move one word per 1 GHz
cycle: 256.0 Gb/s, against 3.2 Tb/s offered. Every frame delivered is checked
word by word. The number of active vS does not change the rate, because the
bottleneck is the single IPI/OPI pair. The lane and vS queues only absorb
bursts. To reach the terabit mark, the IPI, OPI and both multiplexers would
have to handle about 13 words per cycle, or be replicated. This RTL does not
attempt either.
