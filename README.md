# Topology-aware virtualization for an inter-core connected NPU

An inter-core connected NPU is a mesh of NPU cores. Each core has its own
scratchpad SRAM, and cores pass data to each other over a network-on-chip
(NoC) with explicit SEND and RECV instructions instead of going through
shared memory. To share such a chip between several virtual machines, it is
not enough to hand each tenant some cores and some memory. Three things have
to hold:

* a guest writes programs for a *virtual* NPU, a graph of virtual cores with
  a topology. Its instructions and its SENDs name virtual core IDs, and the
  hardware has to route them to the physical cores it was given;
* packets of one virtual NPU must not pass through, and slow down, cores of
  another, even when its cores do not form a rectangle;
* DMA addresses must be translated and checked. A page-based MMU stalls a
  DMA engine that issues a request almost every cycle, so translation has to
  be cheap.

This RTL implements the hardware side of that scheme. It has:

* an instruction router with virtual-to-physical core tables in the
  controller;
* a routing table in every core that rewrites SEND destinations and can
  force a direction at each hop;
* range-based address translation ("vChunk") with a small range TLB and a
  table walker that learns the order in which ranges are used;
* a per-core limit on memory accesses;
* a *hyper mode* in the controller: only the hypervisor can write the
  tables.

The default build is eight cores in a 4x2 mesh with 512 KB of scratchpad per
core. All of it is synthesizable SystemVerilog except the testbench models.

## Block map

```
              configuration (PF, hyper flag)      guest queues (one VF per virtual NPU)
                        |                                   |
               +--------v-----------------------------------v--------+
               | npu_controller                                      |
               |   hyper-mode check -> config bus to the cores       |
               |   VF arbiter -> inst_vrouter (RT root + RT SRAM)    |
               +--------+-----------------------------+--------------+
                        | tcfg_* (broadcast)          | ibus_* (to one physical core)
      +-----------------v-----------------------------v-----------------+
      | npu_tile  x MESH_X*MESH_Y                                       |
      |   h-REG {VMID, RT base/count, RTT_BASE, RTT_END, rate limit}    |
      |   instruction FIFO -> issue to DMA / SEND / RECV                |
      |   meta_zone: NoC routing table + range translation table (RTT)  |
      |   weight_sram (512 KB)                                          |
      |   dma_engine <-> vchunk (range TLB + RTT walker)                |
      |              <-> access_counter                                 |
      |              <-> HBM channel (port of the top)                  |
      |   noc_vrouter (SEND rewrite / RECV) <-> noc_router <-> 4 links  |
      +-----------------------------------------------------------------+
```

Files: `rtl/vnpu_pkg.sv` holds every shared type. There is one module per
file: `inst_vrouter`, `npu_controller`, `noc_router`, `sync_fifo`,
`meta_zone`, `weight_sram`, `vchunk`, `access_counter`, `dma_engine`,
`noc_vrouter`, `npu_tile` and `vnpu_top`.

## Who may write what

The hypervisor owns every table. In hardware this is a flag on each
configuration write: the physical function (PF) sets it, and only the host
hypervisor maps the PF. A write without the flag is dropped, pulses
`cfg_reject` and is counted. The writable regions are listed below (see
`cfg_region_e`).

| region | where | contents |
|---|---|---|
| `CFG_RT_ROOT` | controller | per VMID: valid, table type, entry count, base in RT SRAM |
| `CFG_RT_SRAM` | controller | 128 entries, 4 bytes each |
| `CFG_HREG` | core `core` | VMID, routing-table base and entry count, RTT_BASE, RTT_END, access limit per window |
| `CFG_CORE_RT` | core `core` | NoC routing table entry `index`: valid, physical core, direction |
| `CFG_RTT` | core `core` | RTT entry `index`: VA 48, PA 48, size 32, perm 4, last_v 8 |

The controller writes its own two tables at once. Writes for a core go out
one cycle later on a broadcast bus, and the addressed core takes them. A
core cannot write its tables, with one exception: vChunk updates the `last_v`
field of RTT entries.

Guests never see a VMID. Each virtual function (VF) has its own instruction
queue, and the hardware tags what arrives on queue *i* with VMID *i+1*.
VMID 0 marks a core that belongs to no virtual NPU.

## Instruction routing (`inst_vrouter`)

Each instruction names a virtual core. The root entry of the VMID says which
of two table types the VM uses:

* **standard**: one SRAM entry per virtual core, `{v_core, p_core}`. The
  entry is found at `base + v_core`, and its `v_core` field is checked.
* **2D mesh**: one entry `{v_first, p_first, x, y}` describes a rectangular
  virtual NPU. With `off = v - v_first` and `off < x*y`:
  `p = p_first + (off / x) * MESH_X + off % x`.

Any other virtual core is outside the VM. The instruction is dropped, and
`fault` reports the VMID and virtual core to the guest's VF.

The vRouter keeps the last (VMID, virtual core) -> physical core
translation. A run of instructions to one core leaves one cycle after it is
accepted. A new core costs a root read and an SRAM read, and leaves after
three cycles. A table write clears the kept translation. Translated
instructions go over an instruction bus to the physical core's 4-entry
queue.

## NoC virtualization (`noc_vrouter`, `noc_router`)

A SEND carries `{spad, len, step, dst_vcore}`. Before a line is sent, the
core's send engine looks up `dst_vcore` in its own routing table (in the
meta-zone). The table starts at the h-REG's `rt_base`, so several tables
can share the meta-zone's 128 entries:

* an entry at or past the h-REG's `rt_count`, or an invalid entry, means
  the destination is not part of this VM, so the SEND is refused (`snd_fault`) and nothing enters the network;
* otherwise, `len` lines at `spad, spad+step, ...` become flits. Each flit
  carries its VMID, its virtual and physical destination, its source and a
  last-flit mark. A 2048-byte routing packet is 128 flits of 16 bytes.

A RECV `{spad, len, step}` writes the next `len` arriving flits into the
SRAM. Until a RECV is posted, arriving flits wait in the network. This is
the flow control between the two instructions.

Each router has five ports, and each port has a 2-flit input FIFO. A flit
moves one hop per cycle. The output port of each head flit is chosen like
this:

1. the flit has arrived: local port;
2. the flit belongs to this core's VM, and this core's table entry for its
   virtual destination holds a direction (LEFT/RIGHT/TOP/BOTTOM): that
   direction;
3. otherwise, X-then-Y dimension-order routing (DOR).

Rule 2 is what keeps traffic inside an irregular virtual NPU. In the
end-to-end test, virtual NPU 2 owns cores 2, 3 and 7 of this mesh:

```
 0  1 [2][3]
 4  5  6 [7]
```

Under DOR, a packet from core 7 to core 2 goes through core 6. Core 7's entry
for that destination says TOP, so the packet goes 7 -> 3 -> 2 instead. The
relay cores use the directions that the hypervisor stored. The hypervisor
has to make the stored paths loop-free. The design does not check this.

Routing is per flit, not wormhole. Routing is deterministic, so the flits of
one packet still arrive in order.

## Range translation (`vchunk`)

NPU DMA traffic has three useful properties:

* buffers are large;
* within one pass, addresses mostly increase;
* every iteration repeats the same sequence.

vChunk uses all three. Memory is described by a per-core RTT of
variable-size ranges, sorted by virtual address and bounded by the h-REG
fields RTT_BASE and RTT_END. A 4-entry fully associative range TLB answers
within the cycle. A hit also needs the right permission bit: R for loads, W
for stores.

On a miss, the walker starts from the entry in use, RTT_CUR:

1. If RTT_CUR's `last_v` names the entry that followed it last time, that
   entry is read first.
2. If there is no such entry, or it does not cover the address, entries are
   read from RTT_CUR+1 onward. The scan wraps from RTT_END to RTT_BASE.
   After a full pass without a match, the access faults.
3. The entry found goes into the TLB (round-robin replacement). Its index is
   written into the old RTT_CUR entry's `last_v`. RTT_CUR moves to it.

Each RTT read takes two cycles. A miss whose `last_v` guess is right costs
about four cycles. In the vChunk testbench, a loop over 10 ranges needs 10
RTT reads in its first iteration. In each later iteration, the 6 misses that
the small TLB cannot avoid are all served by `last_v`. Writing a core's h-REG
or RTT flushes its TLB.

## Memory-rate limit (`access_counter`)

Each DMA request to HBM is counted. When the count for the current window
(1024 cycles) reaches the h-REG limit, the DMA engine's requests are held
until the next window. A limit of 0 means no limit.

## DMA and the core (`dma_engine`, `npu_tile`)

A DMA command moves `len` 16-byte lines between virtual address `va` and SRAM
line `spad`:

* **loads** issue one translated read per cycle while the TLB hits and the
  limit allows. They write each response into the SRAM by its tag.
* **stores** translate, read the SRAM line and post the write, taking four
  cycles or more per line.
* a translation fault stops the command and pulses `done` and `fault`
  together.

The tile issues the head of its instruction queue to its unit as soon as that
unit is free: the DMA engine for loads and stores, and the send or receive
engine for SEND and RECV. The units therefore overlap, and a busy unit
stalls the queue. There is no dependency check between units. A program that
sends data it has just loaded must wait for the load's `dma_done`. The
single SRAM write port serves the receive engine first, and the read port
serves the send engine first. The DMA waits when either port is busy.

## Departures and own choices

The description this design follows fixes the following:

* the mechanisms: hyper mode, PF/VF, both routing-table types, reuse of the
  last translation, destination rewrite and direction override, the
  range-TLB / RTT / `last_v` / RTT_CUR algorithm, the access counter;
* the RTT field widths;
* the 4-entry range TLB;
* the 128-entry routing table;
* the 2048-byte routing packet;
* the FPGA configuration: 8 cores, 512 KB scratchpad each, 2D mesh.

This design chose:

* the 4x2 mesh shape;
* 0-based core IDs (figures of the scheme usually number cores from 1);
* ID widths of 8 bits (core) and 4 bits (VMID);
* the instruction format, the flit format and the configuration address
  map;
* the latencies, FIFO depths and SRAM port priorities;
* the 1024-cycle window;
* dropping a SEND to a core outside the VM;
* the rule that direction overrides apply only to flits of the router's own
  VM;
* the h-REG fields that locate a core's routing table (`rt_base`,
  `rt_count`) and their widths;
* reading the flip-flop routing table once per SEND, with no separate cache
  of rewritten destinations.

The following are not included:

* the compute units of each core (systolic array, vector unit, accumulator);
* the HBM and its controller: each core has a request/response channel at
  the top;
* the host CPU;
* the hypervisor's allocation software: buddy allocation into RTT ranges,
  and the topology search that maps a requested virtual topology onto free
  cores. It reaches the hardware only as configuration writes.

The instruction path uses a bus. A dispatch network for instructions would
be the alternative.

Size limits: the instruction format addresses 65536 lines (1 MB) of
scratchpad. The 30 MB-per-core configuration used for the large simulations
(36 or 48 cores) would need a wider `SPAD_AW`. The mesh itself can be built
up to 256 cores (`CORE_W`).

## Simulation

Every testbench checks itself and ends with
`TB_RESULT checks=<n> failures=<m>`. Example, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -j 4 --top-module tb_vnpu_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/vnpu_pkg.sv tb/tb_vnpu_top.sv
./obj_dir/Vtb_vnpu_top
```

| testbench | what it shows |
|---|---|
| `tb_inst_vrouter` | both table types, reuse and lookup latency, isolation faults, 300 random instructions |
| `tb_npu_controller` | hyper-mode rejection, config bus, two VFs with back-pressure, per-VF fault |
| `tb_noc_router` | 4x3 mesh: DOR path through a foreign core, override path around it, random traffic |
| `tb_meta_zone`, `tb_weight_sram` | table and SRAM read/write behaviour |
| `tb_vchunk` | hits, misses, `last_v` learning across iterations, wrap-around, permission faults |
| `tb_access_counter` | the limit holds in every window; a saturating requester gets exactly the limit |
| `tb_dma_engine` | loads and stores against an HBM model with random latency and back-pressure |
| `tb_noc_vrouter` | destination rewrite, one flit per cycle, refusal, RECV flow control |
| `tb_npu_tile` | one core: loop-back through its router, override link, faults, throttling, `last_v` after a flush |
| `tb_vnpu_top` | the default eight-core design end to end, with two virtual NPUs (a 2x2 mesh and an irregular one). It counts every mechanism and fails if one never happens. |
| `tb_send_recv_packets` | 2/10/20/30 routing packets of 2048 B between cores three hops apart: 275, 1323, 2633 and 3943 cycles, about 128 cycles per packet |
| `tb_broadcast` | one core broadcasts 2048 B to 1-4 cores of its virtual NPU, by SEND/RECV and through a shared global memory (`tb/hbm_shared_model.sv`): 142/276/414/547 against 794/916/1044/1172 cycles |

`tb/hbm_model.sv` is a behavioural HBM channel. It has a fixed latency and
random back-pressure, and returns a known pattern for lines that were never
written. The end-to-end tests run at the default parameters.
