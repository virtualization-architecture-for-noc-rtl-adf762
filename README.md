# A virtualized network-on-chip for reconfigurable accelerators

On an FPGA that carries a mesh network-on-chip, a hardware accelerator sits at a
network node and serves whichever software task was mapped to it. While that task
is thinking, sending data or waiting, the accelerator idles, but no other task may
use it. This design shares one accelerator between two tasks. The router gives the
node **two local output ports** instead of one. The network interface (NI) behind
them has **two receive buffers**, one per task. A small scheduler feeds the
accelerator from the two buffers, **first come, first served**. To each task, the
node looks like a PE (processing element) of its own.

A second level of sharing comes from partial reconfiguration. A node's accelerator
lives in a partial reconfigurable region (PRR), and the region can be loaded with a
different function on demand. An **adaptation manager** decides, for every new task,
one of three things:

- share an existing accelerator ("PE as a service"), or
- reconfigure a region ("PRR as a service"), or
- wait until resources free up.

The RTL here is a complete, simulatable model of that system. It has:

- a 3x3 mesh of virtualization-capable routers;
- five reconfigurable tiles, each with an NI, a GCD accelerator and an RSA
  (modular exponentiation) accelerator;
- the adaptation manager, built as a hardware state machine.

The four general-purpose processors of the original system are not included: their
network ports are top-level ports, and a testbench plays their software.

## 1. The system

```
   y=2   [PRR 6] -- [PRR 7] -- [PRR 8]
            |          |          |
   y=1   [GPP 3] -- [PRR 4] -- [PRR 5]          node n = 3*y + x
            |          |          |             x grows east, y grows north
   y=0   [GPP 0] -- [GPP 1] -- [GPP 2]
          x=0        x=1        x=2
```

Every node has a `vrouter`. At the PRR nodes (mask `PRR_MASK = 9'h1F0`, nodes 4 to
8), the router's local ports go to a `vni` network interface and a `prr_pe` region.
At the GPP nodes, the router's local input, its two local outputs and the node's
two task-status bits are ports of `vnoc_top`. Region *k* (0 to 4, in the manager's
numbering) is node *k*+4. The top converts between the two numberings on `asg_node`
and `rel_node`.

A task runs in five steps:

1. The software asks the manager for a function (`req_valid`, `req_func`, and
   `req_last` on the last task of an application).
2. The manager answers with a node and a slot (`asg_valid`, `asg_node`, `asg_slot`).
   After the application's last task is placed it pulses `app_go`.
3. The task sends request packets to that node and slot. Each packet carries its
   own return address.
4. Each reply comes back to the processor node and slot that sent the request.
5. When the task is done, the software reports it (`rel_valid`, `rel_node`,
   `rel_slot`), and the slot is freed.

## 2. Packets

Flits are 16 bits. A packet is a header flit, a size flit and then `size` more
flits:

| flit | request to a PE | reply from a PE |
|------|-----------------|-----------------|
| 0 | header: bit 15 = slot at the target, bits 7:4 = X, bits 3:0 = Y | header back to the requester (its address and slot) |
| 1 | size = 1 + number of operands | 2 |
| 2 | requester's address, in header layout, with the requester's slot in bit 15 | PE's address, with the slot that served the job in bit 15 |
| 3.. | operands: GCD `a, b`; RSA `m, e, n` | result |

The slot bit is the only change to an ordinary XY header. It tells the target
router which of the two local outputs the packet should leave on. The
`vnoc_pkg` package defines the format, the port numbering and the shared types:
`pkt_t` is a packet rebuilt by a receiver and `rsp_t` is a reply.

## 3. The router (`vrouter`, `input_buffer`, `virt_ctrl`)

The router has five inputs (E, W, N, S, Local) and six outputs (E, W, N, S,
Local_0, Local_1). Switching is wormhole, in the manner of the Hermes NoC:

- **Input buffers.** Every input has a 4-flit FIFO (`input_buffer`). The FIFO on
  the local input is the "local input buffer" that the NI's sender writes into.
- **Routing.** A header at the head of a FIFO is routed XY: it moves east or west
  until X matches, then north or south until Y matches. At its target node it goes
  to a local output.
- **Arbitration and wormhole.** Each output has a round-robin arbiter. When an
  output grants an input, the output stays owned by that input for the whole
  packet. The input counts the packet's flits from the size flit and frees the
  output after the last one.
- **Links.** Every link uses valid/ready. A flit moves when both are high. An
  offered flit stays stable until it is taken; an assertion in the router checks
  this.
- **Timing.** A header written into an idle router appears at its output two
  cycles later. After that, one flit moves per cycle when the next stage is ready.

`virt_ctrl` is the virtualization controller. It reads `task_status = {task_1_status,
task_0_status}` from the NI:

- **Port enables.** Local output *k* is enabled only while `task_k_status` is high.
  With one task the router behaves like a conventional single-local-port router.
  With two tasks, both ports deliver, and two packets can enter the node in the
  same cycles.
- **Local port choice.** A packet for this node leaves on the port named by its
  slot bit if that port is enabled. Otherwise it leaves on the other enabled port.
  If no port is enabled, it leaves on Local_0.

## 4. The network interface (`vni`)

```
 Local_0 ──► DR0 ──Data_in_0/AvReceive_0──┐
                                          MUX ──► BC ──► PE (prr_pe)
 Local_1 ──► DR1 ──Data_in_1/AvReceive_1──┘       │
 local input ◄── DataSend ◄───────────────────────┘  (result + return address)
 task_0_status, task_1_status ──► router's virtualization controller
```

- **`data_receive` (DR0, DR1).** Collects one packet from its local port. It keeps
  the return address and up to three operands; further operands are read and
  dropped. Then it raises `av_receive` (AvReceive) and holds the packet on
  `data_in` (Data_in). While it holds a packet it refuses flits, so a second packet
  for the same slot waits in the routers.
- **`buffer_ctrl` (BC).** Keeps a two-entry queue of the order in which the
  AvReceive signals rose. If both rise in the same cycle, slot 0 goes first. When
  the PE is ready, BC:
  1. steers the MUX to the oldest slot;
  2. pulses `pe_start` with that packet's operands;
  3. releases the receiver in the same cycle, so the task's next packet can arrive
     while the PE computes;
  4. remembers the return address.

  When the PE reports `done`, BC offers the result to DataSend. With both slots
  busy, the PE alternates between the two tasks packet by packet.
- **`pkt_mux` (MUX).** Selects Data_in_0 or Data_in_1, with the matching
  AvReceive.
- **`data_send` (DataSend).** Turns a reply into the 4-flit reply packet and
  streams it into the router's local input, one flit per cycle.
- **Task flags.** `task_0_status` and `task_1_status` live in the NI. The manager
  sets and clears them over a sideband port (`cfg_task_valid`, `cfg_task_slot`,
  `cfg_task_on`).

## 5. Reconfigurable regions and accelerators (`prr_pe`, `gcd_pe`, `rsa_pe`)

A region is unconfigured (`FN_NONE`), GCD or RSA.

- **Reconfiguration.** A configuration command starts a reconfiguration of
  `RECONF_CYCLES` cycles (64 by default). During it, `cfg_busy` is high, `func`
  reads `FN_NONE` and no job is accepted. After it, the new function runs.
- **How it is modelled.** A real FPGA would load a partial bitstream. Here both
  accelerators are instantiated, and a counter stands in for the load time. A
  synthesized netlist therefore contains both functions in every region.
- **Unconfigured regions.** A job sent to an unconfigured region completes
  immediately with result 0.
- **`gcd_pe`.** Subtractive Euclid, one subtraction per cycle. The cycle count
  grows with the ratio of the operands, up to 65535 cycles for 16-bit inputs.
  gcd(a,0) = a.
- **`rsa_pe`.** Computes m^e mod n by right-to-left square-and-multiply. Each
  modular product takes W cycles (W = 16), using shift-and-add with two
  conditional subtractions per step. The exponent runs over its bits, so one
  operation takes about `16 + 16*(1 + 2*16)` cycles, roughly 550 cycles or fewer.
  n ≤ 1 gives 0.

## 6. The adaptation manager (`adapt_mgr`)

The manager takes one task at a time and follows this flow:

1. **Is the requested function configured in some region?**
   - **Yes:** if a region with that function runs no task, the task gets its
     slot 0. Otherwise, if a region with that function still has a free slot, the
     task gets that slot. This is "enabling virtualization": the second local port
     of that node opens. If neither exists, continue with step 2.
   - **No:** continue with step 2.
2. **Is any region unconfigured, or configured but idle?** If so, configure the
   requested function there, wait until the reconfiguration ends, and give the task
   slot 0. If not, retry from step 1 every cycle. A finished task can free a slot
   or a whole region.
3. **Assign the task.** This sets the NI's task flag and pulses `asg_valid`. After
   the task marked `req_last`, pulse `app_go`.

Tie-breaks:

- Among candidates, the lowest region index wins.
- In step 2, an unconfigured region is preferred to an idle configured one.

The manager keeps a 2-bit occupancy per region (`pe_task`). Task-end reports are
taken only while it is idle or retrying, so a release and an assignment never use
the command port in the same cycle. An assertion checks this.

## 7. Parameters

| parameter | where | default | origin |
|---|---|---|---|
| `MESH_X`, `MESH_Y` | `vnoc_top` | 3, 3 | the source system (3x3 mesh) |
| `PRR_MASK` | `vnoc_top` | `9'h1F0` | the source system's node map |
| `BUF_DEPTH` | `vnoc_top`, `vrouter` | 4 | own choice |
| `RECONF_CYCLES` | `vnoc_top`, `prr_pe` | 64 | own choice |
| `FLIT_W`, `MAX_OPS` | `vnoc_pkg` | 16, 3 | own choice |
| virtual PEs per node | structure | 2 | the source system |
| `NPE` | `adapt_mgr` | 5 (from `PRR_MASK`) | follows the node map |

The header gives 4 bits each to X and Y, so meshes up to 16x16 can be addressed.
`PRR_MASK` is 9 bits wide, so it only covers a 3x3 mesh. `asg_node` and `rel_node`
are 4 bits wide, which covers 16 nodes. A larger mesh needs both widened.

## 8. Where this model stops, and what is its own

These follow the source design: the 3x3 mesh, the node map, two local ports per
router, DR0/DR1, the MUX, the buffer controller, DataSend, the two task-status
signals, FCFS scheduling, the decision flow of the manager, and the GCD and RSA
functions.

These are this model's own choices, because the source says nothing about them:

- flit width, packet format and return addressing;
- valid/ready links;
- per-output arbiters in place of a central arbiter;
- buffer depth;
- receiver capacity;
- operand widths and the accelerators' algorithms;
- reconfiguration time;
- the NI's configuration port and the manager's release port;
- the fallback for a packet whose slot port is disabled;
- the tie-breaks in the manager.

Known departures:

- **The manager is hardware.** In the source it is a program on a dedicated
  processor. Its decisions are the same, but its timing is not: a hardware
  decision takes a few cycles, where the program would take much longer.
- **Replies pass through the buffer controller.** In the source drawing, DataSend
  is fed from the PE side directly. Here the result passes through the buffer
  controller, which adds the return address.
- **RSA is 16-bit.** This is a functional stand-in, not a cryptographic one.
- **Regions hold both accelerators.** A region is not a real partial-reconfiguration
  flow: a synthesized region contains both accelerators.
- **Processors are not modelled.** The processors, the configuration port of the
  FPGA and the processor running the manager are outside this RTL.
- **Tasks and slots are bound one-to-one.** A task that has been given slot *s*
  must send to slot *s*. The router will deliver to the other slot if *s* is
  disabled, but the manager never creates that case.
- **No baseline.** There is no conventional, non-virtualized router to compare
  against. Performance comparisons with a plain mesh are not reproduced.

## 9. Simulating

Every file in `rtl/` holds one module or package, named after the file. Testbenches
in `tb/` are self-checking: they end by printing `TB_RESULT checks=N failures=M`.
With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_vnoc_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/vnoc_pkg.sv tb/tb_vnoc_top.sv -o sim
./obj_dir/sim
```

Replace `tb_vnoc_top` with any testbench name.

| testbench | what it shows |
|---|---|
| `tb_input_buffer` | FIFO order and full/empty flags under random push/pop |
| `tb_virt_ctrl` | all task-status and slot cases of the local-port choice |
| `tb_vrouter` | XY routing, whole packets per output, per-input order, 2-cycle header latency, both local ports active together, contention |
| `tb_data_receive` | packet rebuild, AvReceive only after the last flit, back-pressure while full |
| `tb_pkt_mux` | selection |
| `tb_buffer_ctrl` | FCFS order, including when both slots wait for a busy PE; release and reply contents |
| `tb_data_send` | reply packet flits under a stalling link |
| `tb_vni` | whole NI with a PE model: task flags, two senders at once, interleaved service, replies |
| `tb_gcd_pe`, `tb_rsa_pe` | results against reference models; RSA cycle bound |
| `tb_prr_pe` | reconfiguration time, job refusal while reconfiguring, both functions |
| `tb_adapt_mgr` | every branch of the manager's flow, with hand-computed placements |
| `tb_vnoc_top` | whole system at default parameters, in two phases (below) |
| `tb_workloads` | task-count sweeps on a two-region system (below) |

`tb_vnoc_top` runs in two phases:

1. It places two GCD and two RSA tasks: two reconfigurations and two
   virtualizations. Two processors then stream 32 jobs to both slots of both PEs
   at once, and the testbench checks every reply.
2. It fills all ten virtual PEs and shows an eleventh task waiting. It then frees
   a region and sees it reconfigured from RSA to GCD, and runs jobs on it.

It counts each mechanism and fails if one never happens. It takes a few seconds.

`tb_workloads` runs the kind of experiment the design was built for, with many
short application tasks competing for few accelerators. The system has two
regions (`PRR_MASK = 9'h030`, nodes 4 and 5). Each task does three things:

1. It asks for a PE.
2. It runs three jobs one after another. For each job it sends a request, waits
   for the reply, then works for 200 cycles on the processor side. During that
   time the PE is free for its other slot.
3. It reports that it has finished.

Tasks beyond the four virtual PEs wait in the manager. The sweeps use 5, 10, 15
and 20 GCD-only tasks, the same counts of RSA-only tasks, and 10, 20, 30 and 40
tasks alternating between GCD and RSA. Every reply is checked. One run gave these
finish times in cycles (the operands are random, so the figures vary a little from
run to run):

| tasks | GCD only | RSA only | | tasks | GCD + RSA |
|---|---|---|---|---|---|
| 5 | 1577 | 4118 | | 10 | 5511 |
| 10 | 2242 | 6729 | | 20 | 11101 |
| 15 | 3059 | 9616 | | 30 | 15381 |
| 20 | 3986 | 12743 | | 40 | 21333 |

Finish time grows about linearly with the number of tasks. In the single-function
sweeps the manager makes both regions that function, since an idle region of the
other function is reconfigured. The first RSA point therefore includes two
reconfigurations. Job length and think time are the testbench's choice, so these
cycle counts are not comparable with any published timing. No non-virtualized
baseline is modelled.

To change the system:

- **Node map.** Edit `PRR_MASK`. Routers, NIs and the manager's region count
  follow.
- **Another accelerator.** Add it to `func_e` and to `prr_pe`.
- **More slots per PE.** This needs a wider slot field in the header, more local
  outputs in `vrouter`, more receivers in `vni`, and a longer arrival queue in
  `buffer_ctrl`.
