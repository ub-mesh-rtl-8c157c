# UB-Mesh router fabric in SystemVerilog

UB-Mesh is a datacenter network for training large language models. Its
premise is that training traffic is local: tensor- and sequence-parallel
traffic, the bulk of all bytes, stays among a few dozen neighbouring
accelerators (NPUs), while data-parallel traffic across the whole system is
small. So instead of a symmetric switched Clos network, UB-Mesh wires
neighbours directly and recursively: the NPUs of a board form a full mesh
(dimension X), the NPUs at the same position on the boards of a rack form a
full mesh (Y), the racks of a row form a full mesh, and the racks of a column
form a full mesh. That is a 4D full mesh; a Pod is 4 x 4 racks of 64 NPUs.
Switches are kept only where direct links do not reach: a plane of low-radix
switches (LRS) per rack, and high-radix switches (HRS) between Pods.

Every NPU is also a router, so traffic between two NPUs that share no direct
link is forwarded by NPUs and LRSs on the way. This RTL implements that
forwarding fabric: the routers, their routing and fault-handling logic, a
rack, and a Pod. The NPUs' compute, the CPUs, the HRS and the physical links
are outside it; their connections are ports.

## What a packet sees

A packet is one flit (`ub_pkg::flit_t`, 119 bits): type (data or
notification), virtual lane, destination and source address, an 8-byte
source-routing header and a 32-bit payload.

**Addresses are structured by location**: `{pod[2:0], rack row[1:0], rack
column[1:0], board y[2:0], NPU x[2:0]}`. A router never matches prefixes. It
compares the destination with its own address from the top: at the first
field group that differs it reads one small table at the destination's
linear offset inside that group: Pod table (8 entries), rack table (16,
indexed `{row,col}`), NPU table (64, indexed `{y,x}`). 88 entries route
anywhere in a SuperPod (`linear_route_table`).

**Source routing** lets the sender dictate the path. The header layout is:

| byte | 7 | 6 | 5 | 4 | 3 | 2 | 1 | 0 |
|---|---|---|---|---|---|---|---|---|
| field | instr[5] | instr[4] | instr[3] | instr[2] | instr[1] | instr[0] | bitmap[11:4] | bitmap[3:0], ptr[3:0] |

`ptr` is the hop number; every router increments it. If `bitmap[ptr]` is 1
the hop is source routed, otherwise the router uses its table. A source
routed hop uses `instr[k]`, where k is the number of 1 bits in the bitmap
below `ptr`, so the k-th source-routed hop takes the k-th instruction. An
instruction is `{vl, port[6:0]}`. Twelve hops, six of them source routed,
fit in a header (`sr_hop`). The byte layout and field sizes are UB-Mesh's.
The counting rule and the instruction encoding are this design's own
reading, because they are not published.

**Virtual lanes.** Two VLs per link, each with its own buffer. A packet
starts on VL 0. At each hop the next VL comes from the SR instruction or
from the table entry (the table can only raise it). UB-Mesh computes a
deadlock-free VL assignment for all paths offline (its "TFC" algorithm, whose
details are not published). Here that assignment is whatever management
writes into tables and headers. The default tables route X then Y inside a
rack, then row then column between racks. That order is free of cyclic
dependencies on VL 0 alone.

## Routing decision (`apr_route`)

For the packet at the head of each input lane, in this order:

1. destination equals the router's own address and the router has a local
   port → deliver locally;
2. SR hop → the instruction's port and VL;
3. otherwise the table entry's port, VL = old VL OR entry VL;
4. if the chosen port is dead, or outside the router → the port's
   alternative (`alt_port`).

Step 4 is how faults are handled in hardware. A port is dead when its link is
down or when the NPU behind it has failed. The alternative is the LRS uplink
in an NPU. In the LRS plane it is the backup NPU for an NPU port, and the HRS
uplink for a rack link.

## Router (`ub_router`)

Input-buffered. Each input port has one 2-flit FIFO per VL (`vl_fifo`). Each
output has a round-robin arbiter (`rr_arbiter`) over all lane heads routed
to it whose next VL has room downstream (`out_ready[port][vl]`). The grant
sends the flit on the same cycle and pops it. **One cycle per hop**, one
flit per output per cycle. Flow control is a ready bit per VL that depends
only on FIFO occupancy, so ready never waits on valid combinationally. An
assertion in `vl_fifo` checks that a sender never writes into a full lane.

## NPU side (`npu_ub_ctrl`)

One 16-port router per NPU (for 8 x 8 racks):

* ports 0..7: X mesh; port i leads to NPU i of the same board; port
  `MY_X` (the NPU itself) is the local port;
* ports 8..15: Y mesh; port 8+j leads to the same position on board j;
  port `8+MY_Y` is the uplink to the rack's LRS plane.

That gives 7 X links, 7 Y links, one switch link and the local port.

* **All-Path Routing, source side (`apr_path_select`).** Per flow (4), up
  to 4 SR headers, one per path, each with a valid bit. A core packet sent
  with `core_tx_sr` takes the next valid path in round-robin order, so a
  flow's packets spread over all its paths, e.g. the direct link plus
  one-hop detours. With no valid path the packet goes with a zero header,
  i.e. table routed.
* **Direct notification (`fault_notify`).** When a link drops, the NPU at
  its end sends one notification packet to each node listed for that port
  in a preloaded table (the nodes whose paths crossed the link). It does not
  flood the failure hop by hop. The receiver's `apr_path_select` clears the
  named path, and that flow's next packets use the others. Notifications
  use table routing, which already avoids the dead port.

## Rack and 64+1 backup (`ub_mesh_rack`, `lrs_plane`)

A rack has 64 NPUs (8 boards x 8), one backup NPU, and an LRS plane. In
hardware the plane is 18 fully connected switches. Here it is one
non-blocking 73-port router:

* ports 0..63: the NPUs;
* port 64: the backup NPU;
* ports 65..68: links to the racks of the same row. The own column's slot is
  the CPU-board port.
* ports 69..72: links to the racks of the same column. The own row's slot is
  the Pod-switch (HRS) uplink.

Failover: management writes `CFG_FAIL` with the failed NPU's offset. Then:

* the backup NPU takes the failed NPU's address and accepts its traffic;
* every NPU with a direct link to the failed one marks that port dead, so
  traffic goes NPU → LRS → backup (one extra hop in place of a lost NPU);
* the LRS sends the failed NPU's traffic to the backup port.

Traffic that would have passed *through* the failed NPU (X-then-Y routes)
is redirected the same way.

## Pod (`ub_mesh_pod`, top)

`RR x RC` racks. The LRS row ports of rack (r,c) link to every rack
(r,c'), and its column ports to every rack (r',c). Ports of the top:

* per NPU (and backup): a core injection/ejection port;
* per rack: a CPU port and an HRS port;
* a management bus `cfg` (`ub_pkg::cfg_t`) shared by all racks: routing
  table entries, SR paths, notification targets, failover;
* link-up inputs for every NPU port and every rack link, to inject faults;
* event pulses for statistics.

**Default size differs from UB-Mesh:** `RR = 2, RC = 2`, so 4 racks and 256
NPUs. UB-Mesh's Pod is 4 x 4 racks, 1024 NPUs. Set `RR = 4, RC = 4` for the
real size. Linting that flat design with verilator needs more than 32 GB, one
64+1 rack takes about 2 GB. Rack and board sizes are UB-Mesh's (8 x 8).

## Configuration bus

`cfg_t = {valid, rack {row,col}, node, kind, index, data}`; one write per
cycle, effective the next cycle. Node 0..63 is NPU `{y,x}`, 64 the backup,
65 the LRS plane, 66 the rack.

| kind | index | data |
|---|---|---|
| `CFG_TABLE` | `{table[1:0] (0 NPU, 1 rack, 2 Pod), offset[5:0]}` | `[7:0] {vl, port}` |
| `CFG_PATH` | `{clear, flow[1:0], path[1:0]}` | SR header (sets the path valid unless clear) |
| `CFG_NOTIFY` | `{port[3:0], slot}` | `{valid, target addr, flow, path}` |
| `CFG_FAIL` | – | `{active, failed offset[5:0]}` (node 66) |

## Departures and simplifications

* Links are abstract flit channels of one flit per cycle. Lane counts (UB
  x72 per NPU, x128 per rack link, x256 LRS aggregates), the MAC/PHY and
  SerDes are not modelled.
* The two UB IO controllers of an NPU are one router here. The 18 LRSs of a
  rack are one switch.
* Packets are single flits. The UB transaction layer (load/store/atomic,
  read/write/message) is not published and is not modelled. The payload is
  opaque.
* The deadlock-free VL computation (TFC) is not in hardware. The tables and
  headers carry its result.
* Path choice is round robin over valid paths; congestion-aware choice is
  not modelled.
* The Collective Communication Unit (CCU) in the UB IO controller, the NPU
  compute, CPUs, NICs, HRS and DCN switches are not implemented.
* Buffer depths, flow and path table sizes, port numbering, address widths,
  the management bus and all reset defaults are this design's choices.

## Simulating

Every file in `rtl/` holds one module or package. `ub_pkg.sv` must be
compiled first. Each testbench in `tb/` prints
`TB_RESULT checks=N failures=M` and ends itself. For example:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_ub_mesh_pod \
        rtl/ub_pkg.sv tb/tb_ub_mesh_pod.sv
    ./obj_dir/Vtb_ub_mesh_pod

`tb_ub_mesh_pod` runs a 2 x 2-rack Pod with 2 x 2 NPUs per rack (parameters
`N_X, N_Y, RR, RC`) through five phases:

1. all-to-all traffic;
2. two source-routed paths for one flow;
3. a link failure with direct notification and path switching;
4. a failed NPU replaced by the backup;
5. CPU ingress and HRS egress.

It checks every packet's delivery and counts each mechanism. It takes about
300 cycles. Building it takes about three minutes.

The unit testbenches (`tb_sr_hop`, `tb_linear_route_table`, `tb_vl_fifo`,
`tb_apr_route`, `tb_ub_router`, `tb_apr_path_select`, `tb_fault_notify`)
compare their block against reference models or directed expectations.
`tb_ub_router` also checks the one-cycle hop latency.

The largest configuration simulated is 4 racks x 4 NPUs. The default Pod
(4 racks x 65 NPUs) has not been simulated.
