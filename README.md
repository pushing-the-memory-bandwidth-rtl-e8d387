# Salvaging idle I/O bandwidth for memory: CXL link multiplexing RTL

A server CPU splits its pins roughly evenly between memory (DDR channels) and
I/O (PCIe lanes). Memory-bound workloads can saturate the DDR channels while
the PCIe lanes sit mostly idle. CXL runs over the same PCIe lanes and can carry
I/O traffic (CXL.io) and memory traffic (CXL.mem) on one link at the same time.
The SURGE scheme, from "Pushing the Memory Bandwidth Wall with CXL-enabled Idle
I/O Bandwidth Harvesting", uses this. An I/O link that already serves a device
such as a NIC is split in two below the CPU. One branch still goes to the NIC.
The other goes to an extra CXL Type-3 memory device, the *salvage memory*. The
OS then places part of a workload's pages in salvage memory, and the matching
memory traffic rides in the link slots the NIC leaves empty.

This repository gives RTL for the hardware part of that scheme:

* the multiplexing and arbitration stage of the CPU's CXL controller, which
  interleaves CXL.io and CXL.mem flits on one link, I/O first;
* the 2-port CXL multiplexer, which sends each flit to the NIC or to the salvage
  memory and merges their replies, again I/O first;
* a pod top-level that has one such interface per server. All the servers' salvage
  links lead to one shared (pooled) multi-headed memory device. This pooled
  arrangement ("SURGE Pod") is the configuration the source work evaluates
  most.

The rest of the scheme is standard parts or software, and is not RTL here:

* standard parts: the CXL transaction and data link layers, the PHY, the NIC,
  the memory device and the CPU;
* software: the offline model that picks the traffic split, the cluster
  manager, and the OS page allocator.

## How the link is shared

```
   CXL.io DLL        CXL.cache/.mem DLL          (standard controller layers)
      |  ^               |  ^
  64B payloads       64B payloads
      v  |               v  |
  +-------------------------------+
  | flexbus_arbiter               |  wraps payloads into 68-byte flits,
  |  TX: I/O-first merge + CRC    |  merges I/O first; checks CRC on RX
  |  RX: CRC check, steer by ID   |  and steers by protocol ID
  +-------------------------------+
              | ^   68-byte flits, one per clock each way
              v |
  +-------------------------------+
  | cxl_mux2                      |  downstream: steer by protocol ID
  |  dn: steer   up: I/O-first    |  upstream: merge, I/O first
  +-------------------------------+
       | ^                  | ^
  primary link          salvage link
   to the NIC         to salvage memory
```

`surge_port` is these two blocks joined. `surge_pod` holds `N_SERVERS` of them
(default 8).

**Strict I/O priority.** The source design treats the link as the I/O device's
own, so I/O traffic always wins. Both merge points, controller transmit and
multiplexer upstream, use the same rule. When an I/O flit and a memory flit are
ready in the same cycle, the I/O flit goes and the memory flit waits. When no
I/O flit is ready, a memory flit takes the slot. The effects:

* I/O throughput and latency are the same as on an unshared link.
* Memory gets exactly the slots that I/O leaves idle.
* No slot goes unused while memory traffic is waiting.

`tb_io_scenarios` measures this. With memory traffic always ready and I/O
offered in 10/50/80 % of cycles, memory got 90/49/19 % of the slots. The link
was full in every cycle, and no I/O flit was ever delayed. The cost is on the
memory side: under sustained heavy I/O, memory requests wait. The source work
accepts this, because heavy I/O is outside the use case. Its software moves
pages back to primary memory when it expects I/O to rise.

**Flit format.** A flit is 68 bytes, with a 64-byte payload, as in the source
design's link model. The 4 remaining bytes are laid out here as:

| bits      | field                                           |
|-----------|-------------------------------------------------|
| [543:528] | header: [531:528] protocol ID, [543:532] zero   |
| [527:16]  | 64-byte payload                                 |
| [15:0]    | CRC-16/CCITT over header and payload            |

The CRC uses polynomial 0x1021, initial value 0xFFFF, most significant bit
first. Protocol IDs are 1 = CXL.io, 2 = CXL.cache and 3 = CXL.mem; any other
value is unknown. The types and the CRC function are in `rtl/surge_pkg.sv`.

**Steering.** Flits are steered as follows:

* Downstream, the multiplexer sends CXL.io flits to port 0 (the NIC). CXL.mem
  and CXL.cache flits go to port 1 (the salvage memory).
* On receive, the arbiter passes I/O flits to the CXL.io stack. Cache and mem
  flits go to the .cache/.mem stack.
* A flit with a bad CRC, or with an unknown protocol ID, is dropped and
  counted. There is no link-level retry here; a full CXL link layer would
  supply it.
* CXL.cache travels with .mem because the two share one stack in the
  controller. The source work does not use CXL.cache.

## Interfaces and timing

Every stream is valid/ready. A transfer happens in a cycle where both valid and
ready are high. The sender holds valid and data steady until then; assertions
in the RTL check this. Each direction carries at most one flit per cycle.
Reset is synchronous and active low.

| path (no contention)                    | latency  |
|-----------------------------------------|----------|
| DLL payload in → flit at device port    | 2 cycles (arbiter register, multiplexer register) |
| device flit in → DLL payload out        | 1 cycle (multiplexer merge register; receive steering is combinational) |

At one 68-byte flit per cycle, a clock of 941 MHz matches the 64 GB/s raw rate
of a x16 PCIe 5.0 link. The clock is not a parameter of the RTL. The 50–100 ns
latency that CXL adds comes from SerDes, the link and the device, all outside
this RTL.

Each block reports wrap-around 32-bit event counters. `arb_stats_t` has I/O
and memory flits sent and received, cycles in which memory waited behind I/O,
and CRC and protocol drops. `mux_stats_t` has flits steered each way, drops,
flits merged, and upstream priority stalls.

## Files

| file | contents |
|------|----------|
| `rtl/surge_pkg.sv` | flit type, protocol IDs, CRC and flit builder, counter structs |
| `rtl/prio_merge2.sv` | registered 2:1 merge with fixed priority, and stall counter |
| `rtl/flit_slice.sv` | one-entry valid/ready register stage |
| `rtl/flexbus_arbiter.sv` | controller multiplexing and arbitration stage |
| `rtl/cxl_mux2.sv` | 2-port CXL multiplexer |
| `rtl/surge_port.sv` | one server's interface: arbiter + multiplexer |
| `rtl/surge_pod.sv` | top: `N_SERVERS` interfaces, parameter default 8 |
| `tb/tb_ref_pkg.sv` | independent reference CRC and flit builder, payload formats used by the testbenches |
| `tb/nic_model.sv`, `tb/pooled_mem_model.sv` | behavioural NIC and multi-headed memory device |
| `tb/tb_*.sv` | self-checking testbenches |

## Testbenches

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each also has
a watchdog that ends a hung run with a failure.

* `tb_flexbus_arbiter`, `tb_cxl_mux2` and `tb_surge_port` are directed and
  random tests of each block. They check latency, flit contents, priority,
  drops, back-pressure and one-flit-per-cycle throughput. Expected flits are
  built with the reference CRC in `tb_ref_pkg`, which is written differently
  from the RTL's.
* `tb_surge_pod` runs the full pod at its default size of 8 servers. Each
  server has a NIC model with its own load: low_low, low_high, high_low,
  med_med or high_high (RX_TX, 10/50/80 % of slots). Each server also writes
  and then reads back a private block of the shared memory model, with up to
  8 requests outstanding. The test checks all data and all counters. It also
  checks that a lightly loaded server finishes its memory work before a
  heavily loaded one. Every mechanism must occur at least once: both kinds of
  priority stall, a CRC drop, a protocol drop, salvage-link back-pressure, and
  several servers using the pooled memory in the same cycle.
* `tb_io_scenarios` measures how many slots memory gets under the five I/O
  loads (see above).

To run one with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/surge_pkg.sv tb/tb_ref_pkg.sv rtl/prio_merge2.sv rtl/flit_slice.sv \
  rtl/flexbus_arbiter.sv rtl/cxl_mux2.sv rtl/surge_port.sv rtl/surge_pod.sv \
  tb/nic_model.sv tb/pooled_mem_model.sv tb/tb_surge_pod.sv --top-module tb_surge_pod
./obj_dir/Vtb_surge_pod
```

For the other testbenches, change the last file and `--top-module`. Each run
takes under a second.

## Where this follows the source work and where it does not

Taken from the source work:

* an I/O link bifurcated by a 2-port CXL multiplexer into a primary link (I/O
  device) and a salvage link (Type-3 memory);
* a multiplexing-and-arbitration stage below the CXL.io and CXL.cache/.mem
  data link layers;
* strict I/O-over-memory priority;
* the 68-byte flit with a 64-byte payload;
* one salvage link per server into a pooled multi-headed device, with a pod
  size of about 8.

This design's own choices, because the source work does not specify them:

* **Flit layout.** The source says 68 bytes of which 64 are payload and 2 are
  overhead; that does not add up. Here the other 4 bytes are a 2-byte header
  and a 2-byte CRC.
* **Encodings and policies:** the protocol-ID encoding, the CRC polynomial,
  drop-and-count instead of retry, the valid/ready handshakes in place of CXL
  credits, and the register stages and latencies.
* **Upstream priority.** The source states I/O priority for the controller's
  arbiter. Here the multiplexer's upstream merge uses it too.
* **One fixed policy.** The CXL Flex Bus mechanism allows a programmable
  arbitration policy. Only the I/O-first policy the source uses is built.

Not modelled:

* the CXL transaction and data link layers, the PHY, the NIC, the pooled
  memory device and the CPU with its DDR memory. They are standard parts; the
  testbenches use behavioural models of the NIC and the memory device.
* the traffic-split machinery: load-latency curves, the AMAT model, the solver
  that picks the fraction R* of traffic for primary memory, and first-touch
  page placement with probability R*. It is software and reaches this
  hardware only through where pages sit in the address space. Routing
  requests by physical address to primary or salvage memory is the CPU's own
  memory fabric, also outside.
* link-level retry and credit-based flow control.
