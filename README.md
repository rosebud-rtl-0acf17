# Rosebud packet-processing framework in SystemVerilog

The main idea: middlebox software runs on many small RISC-V cores, each in its own
Reconfigurable Packet-processing Unit (RPU) with local memories and an accelerator.
All the plumbing around the cores is fixed hardware: a load balancer, packet
switches, a DMA engine per RPU, loopback and broadcast messaging. The cores only see
packet *descriptors*. A packet arrives already placed in a memory slot, with its
header copied into fast data memory, and the core answers with a descriptor saying
where the packet goes. The load balancer only decides *which RPU and which slot*
a packet gets. Every packet past it therefore has a place to land, and nothing is
dropped inside the fabric.

## Structure

```
eth0/eth1/veth ─► load_balancer ─► rx inter-cluster switch ─► 4 x cluster switch ─► 16 x rpu
                                    ▲ host DRAM  ▲ loopback        (512 -> 128 bit)     │
                                    │            └──── loopback ◄────┐                    │
eth/veth/host ◄── tx inter-cluster switch (5 ports) ◄── 4 x cluster switch ◄────────────┘
                                                        (128 -> 512 bit)
rpu ── ctrl messages ──► load_balancer (slot count, slot free, slot request/grant)
rpu ── broadcast writes ─► bc_msg_switch ─► every rpu in the same cycle
```

| Module | What it does |
|---|---|
| `rosebud_pkg` | Link field encodings, descriptor, RPU address map, register offsets, message types |
| `rosebud_top` | Whole framework, 16 RPUs in 4 clusters (parameters), traffic counters |
| `load_balancer` | Round-robin RPU/slot assignment, per-RPU free-slot masks, slot grants, host register channel (enable mask, flush, slot counts) |
| `pkt_switch` | Unidirectional switch: one FIFO per input, width conversion, per-packet round-robin per output. Used for both stages in both directions |
| `loopback` | Strips the destination header beat and feeds the packet back to the receive side |
| `bc_msg_switch` | Takes one broadcast message per cycle, round-robin, and delivers it to all RPUs at once |
| `rpu` | One RPU: memories, interconnect, firewall accelerator, and the core data-bus decoder. The core's buses are ports |
| `rpu_mem` | IMEM, DMEM, 1 MB packet memory, accelerator memory. The core has priority on the shared packet-memory port |
| `rpu_interconnect` | DMA engine: writes received packets into slots, copies headers, queues descriptors, sends packets out (with loopback header), returns slots, loads memories from the host. Also holds the broadcast FIFO and notifications, interrupts and registers |
| `fw_ip_matcher` | Firewall accelerator: 1050 /24 blacklist prefixes. It compares 9 bits, then 15 bits, in two cycles |
| `stat_counters` | Bytes, frames, drops and stalled cycles per link |
| `sync_fifo`, `rr_arbiter`, `tdp_ram`, `axis_width_conv` | Building blocks |

## Interfaces and conventions

- **Links.** Links are AXI-stream style: data, byte keep, last, valid/ready, plus a
  destination and a user field.
  - On the receive side the user field is `{type, ingress port, slot}`.
  - Type `RX_MEMWR` marks a host memory write. Its first 16 bytes hold the core
    address to write to. Host memory writes load IMEM, DMEM, packet memory or
    accelerator memory before a core boots.
- **Ports.** 0 and 1 are Ethernet, 2 is the host virtual Ethernet, 3 is host DRAM
  and 4 is loopback.
- **Slots.**
  - Slots are numbered from 1. Slot *k* lives at `SLOT_BASE + (k-1)*SLOT_SIZE` in
    packet memory.
  - Its header copy lives at `HDR_BASE + (k-1)*HDR_SIZE` in data memory.
  - Both bases must be 16-byte aligned.
  - The core announces its slot count with one register write. A slot is returned
    automatically after its packet has been sent.
- **Core address map.**

  | Region | Address |
  |---|---|
  | IMEM | `0x0` |
  | Interconnect registers | `0x40000` |
  | Accelerator | `0x50000` |
  | DMEM | `0x800000` |
  | Broadcast region (4 KB) | DMEM + `0x3000` |
  | Packet memory | `0x1000000` |

  The register offsets are listed in `rosebud_pkg`.
- **Descriptors.** A send descriptor with length 0 drops the packet. A send to
  port 4 carries the destination `{slot, RPU}`, written to `LPBK_DEST` beforehand.
  The core gets that slot from the load balancer with a slot request.
- **Broadcast.**
  - A core write into the broadcast region is queued in a 16-entry FIFO. The write
    waits while the FIFO is full.
  - The message is written into every RPU's copy of the region in the same cycle.
  - A message can also be queued as a notification and raise an interrupt. This is
    enabled per 256-byte sub-region.
- **Interrupt bits.** 0 is broadcast notification, 4 is evict and 5 is poke. The
  mask `0x30` enables evict and poke.

## What is built and what is not

**Built as RTL:**
- the load balancer
- the two-stage switching in both directions
- loopback
- broadcast messaging
- the per-RPU DMA/interconnect
- the memory subsystem
- the firewall accelerator
- traffic counters
- the full 16-RPU top level

**Not built:**
- **The RISC-V core (VexRiscv).** Its instruction and data buses are ports of each RPU.
- **Ethernet MACs, PCIe and the host NIC logic.** Their streams and register
  channels are ports.
- **The host DRAM access manager.** Host DRAM traffic is a plain packet port.
- **The Pigasus matcher.** The accelerator ports it would use are left free.
- **Partial reconfiguration.** The PR border registers appear only as register stages.
- **The firewall rule list.** The original design compiles the list into the
  accelerator. Here it is loaded at run time from accelerator memory, 4 rules per
  128-bit word with a valid bit.
- **Sending a packet by telling the load balancer which slot is ready.** Only the
  direct send through the interconnect exists.

Sizes not given by the source and chosen here:
- IMEM 32 KB, DMEM 32 KB and accelerator memory 16 KB.
- Packet-memory read latency of 2 cycles.
- Switch FIFO depth of 16.
- The data bus allows one outstanding read.

## Verification

Each block has a self-checking testbench in `tb/`, using random traffic and a
reference model, with checks on cycle counts where the design promises a rate:
- one 16-byte beat per cycle into an RPU
- a quarter-rate narrow link
- 3-cycle firewall lookup
- each broadcast sender served once every 16 cycles under load
- 2-cycle packet-memory reads

`tb/core_model.sv` stands in for a core. It runs the firewall, loopback and
broadcast firmware as bus transactions.

`tb_rosebud_top` runs the full-size top with 16 core models, with these steps:
1. Loads rules over the host path.
2. Drives all three inputs at once.
3. Forces the load balancer to stall by enabling only one slow RPU.

It then checks every output packet by its payload sequence number. It also checks
that these mechanisms each happened:
- drops, loopback sends and receives
- broadcasts sent and notified
- load balancer stall, back-pressure and simultaneous inputs

At the end, every RPU must hold the same broadcast region and every slot must be
back at the load balancer.
