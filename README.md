# A two-level addressed instruction network for distributed quantum control

In a distributed quantum computer every node (here: one NV center in
diamond, with an electron and one or two Carbon-13 nuclear spins) has its
own node controller, and one central controller sends every physical
instruction to the node controllers over a narrow shared link. How the
instruction names its target decides both its length and how many nodes it
can start at once:

* an **ID** address (log2 N bits) is short but names one node, so every
  operation is issued on its own;
* a **bitmap** address (N bits) can start the same operation on any set of
  nodes, but at N = 1024 it takes 64 cycles of a 16-wire link to send.

This RTL implements the middle road described in *Parallelizing Program
Execution on Distributed Quantum Systems via Compiler/Hardware
Co-Design*: the N node controllers are split into M **subnets** of K = N/M
controllers, and the address is decoded in two cascaded stages. A subnet
address picks one or more subnets, a node controller address picks one or
more controllers inside each picked subnet. Either half can be an ID or a
bitmap, so a short address can still start an operation on many nodes in
the same cycle. The compiler has to place the work so that this can be used.
In the semi-distributed mapping, one logical qubit sits on two neighbouring
nodes.

The code is SystemVerilog-2017. It is synthesizable apart from the
testbenches and has no vendor primitives.

## Address encoding schemes and addressing modes

The instruction address is the concatenation `{subnet address, node
controller address}`, subnet address in the upper bits.

| scheme (`ENC`) | subnet addr W_S | NC addr W_NC | what one instruction can reach (rho) |
|---|---|---|---|
| `SUBID_NCBIT`  | log2 M (ID)  | K (bitmap)     | any set of controllers inside one subnet, rho = K |
| `SUBBIT_NCID`  | M (bitmap)   | log2 K (ID)    | controller k in any set of subnets, rho = M |
| `SUBBIT_NCBIT` | M (bitmap)   | K (bitmap)     | the same local set in any set of subnets, rho = N |

An addressing mode is written (W_S, W_NC). The address occupies
ceil((W_S + W_NC)/L) words of the L-wire link, one word more than nothing.
The extra words are the **parallelization overhead**
delta = ceil((W_S + W_NC)/L) - 1: the cycles an instruction costs beyond a
single-word (SISD) address. For example, at N = 1024 and L = 16:

| mode | scheme | M x K | delta |
|---|---|---|---|
| (7, 8)   | SUBID_NCBIT  | 128 x 8   | 0 (default) |
| (6, 16)  | SUBID_NCBIT  | 64 x 16   | 1 |
| (16, 6)  | SUBBIT_NCID  | 16 x 64   | 1 |
| (32, 32) | SUBBIT_NCBIT | 32 x 32   | 3 |
| (1024, 0)| SUBBIT_NCID  | 1024 x 1  | 63 |

A zero-width half is allowed: with M = 1 every instruction selects the
single subnet, and with K = 1 the single controller of each subnet.

The default build is N = 1024 controllers in mode (7, 8). That is the widest
subnet-ID mode whose address still fits one 16-bit word, so delta = 0. This
choice is ours; the source evaluates the whole range of modes and does not
name a single design point.

## What travels on the link

`ni_tx` serializes an instruction into L = 16-bit words, one per cycle, and
`ni_rx` rebuilds it:

| word | contents |
|---|---|
| 0 | `{reserved, qsel[1:0], opcode[3:0]}` |
| 1 .. 1+delta | address, least significant word first |
| then | one 16-bit word per parameter, parameter 0 first |

Its **issue time** is therefore 2 + delta + (number of parameters) cycles.
The parameter counts are set so that the single-word issue times equal the
published ones. The execution times are those the node controller counts:

| instruction | opcode | parameters | issue (delta = 0) | execution (10 MHz cycles) |
|---|---|---|---|---|
| R_X(theta)  | 1 | 3 | 5 | 62 |
| R_Y(theta)  | 2 | 3 | 5 | 62 |
| R_Z(theta)  | 3 | 1 | 3 | 11 |
| CR_X(theta) | 4 | 2 | 4 | 62 |
| entangle    | 5 | 1 | 3 | 1160 |
| measure     | 6 | 0 | 2 | 400 |

Besides the 16 data wires the link has one `link_valid` wire. The receiver
knows the packet length from the opcode, so no other framing is needed.
The receiver registers the whole instruction and broadcasts it, with a
one-cycle `inst_valid`, to every subnet.

## Serial, pipelined and parallel execution

The gain of the design comes from how the central controller overlaps
instructions. A node controller drives one qubit at a time, so two
instructions for the same node form a **node controller dependency**. The
shared link is an **interface dependency**. `central_controller` works as
follows:

1. A 16-deep FIFO takes the compiled instruction stream.
2. `target_decoder` expands the address of the instruction at the head of
   the FIFO into the set of nodes it will occupy. It is the same two-level
   decode the subnets use.
3. The head instruction is sent only when none of those nodes is busy and
   none has an instruction still on its way to it. Two masks cover the
   in-flight part:
   * `mask_tx`: targets of the instruction being serialized;
   * `mask_rx`: targets of the instruction just delivered, for the cycle
     before the nodes' `busy` flags rise.

This gives three kinds of sequence, each with its own run time. All times
are in cycles, counted from the first link word to the last busy cycle, and
are checked cycle-exactly by the testbenches:

| sequence | what happens | run time |
|---|---|---|
| parallel: same opcode and parameters, different nodes | one instruction with a multi-target address (or ceil(n/rho) of them) | N' (tau_I + delta) + tau_E + 1 |
| pipelined: different nodes | instructions follow each other on the link with no gap; executions overlap | sum(tau_I + delta) + tau_E(last) + 1 |
| serial: same node | each instruction waits for the previous one's execution | sum(tau_I + delta + tau_E) + 2n - 1 |

These are the analytical run-time expressions of the source, with a few
cycles added by this implementation:

* the receiver's register stage adds one cycle per sequence;
* each serial dependency adds two cycles of turnaround. The central
  controller has to see `busy` fall, and the first word of the next
  instruction follows one cycle later.

As an example of what this buys, `tb_qnet_workload` runs three layers of
logical R_Y and R_Z gates on 32 logical qubits (64 nodes in 8 subnets of 8,
mode (3, 8)). Each logical R_Y becomes two serial R_Y pulses on the first
node of the pair. Each logical R_Z becomes one R_Z on each of the two nodes.
With one instruction per subnet and step (72 instructions), the program
takes 540 cycles. Sending the same 384 physical operations one node at a
time takes 1548 cycles under the same rules, 2.86 times as long.

The compiler decides which instructions are combined into one
multi-target address. The hardware only executes that choice and
enforces the dependencies.

## Node controller

`node_controller` runs a three-stage pipeline on each instruction it is
selected for:

1. **capture**: register the broadcast instruction when `inst_valid` and
   the select from both decoder levels are high;
2. **decode**: pick the target hardware and compute the drive phase. The
   electron (qubit 0) uses the MW generator, the Carbon-13 qubits the RF
   generator; entangle and measure have command types of their own;
3. **configure**: issue the one-cycle `cmd` to the quantum-classical
   interface, three cycles after the instruction was on the broadcast bus.

`busy` rises the cycle after capture and stays high for exactly the
execution time of the opcode. That time already includes the pipeline and
the generator delays, which are 1.32 us for RF and 396 ns for MW.

**R_Z is a virtual Z gate.** It sends no pulse. Instead it adds its angle
to a 16-bit phase frame of its qubit, where 2^16 is one full turn. Later
R_X, R_Y and CR_X pulses on that qubit carry `phase = parameter 1 + frame`.
R_Y is R_X with an extra quarter turn (0x4000).

A measurement samples `meas_bit` in its last busy cycle and reports it with
`res_valid`/`res_bit`. The central controller keeps the last outcome of
every node in `meas_result`.

The meaning of the parameter words is our choice, because the source only
gives their number: parameter 0 is the angle, parameter 1 the phase,
parameter 2 is passed through. The same holds for the qubit numbering
(0 = electron).

## Node numbering and subnet organisation

For parallelism inside a logical qubit, the nodes of one logical qubit must
be reachable by one address:

* with `SUBID_NCBIT` and `SUBBIT_NCBIT`, consecutive nodes share a subnet:
  node n sits in subnet n / K at local index n mod K;
* with `SUBBIT_NCID`, consecutive nodes are spread over subnets: node n sits
  in subnet n mod M at local index n / M.

`qnet_top` applies this mapping, so the per-node ports (`cmd[n]`,
`meas_bit[n]`, `node_busy[n]`, ...) are indexed by node number n in every
scheme. The compiler uses the same numbering when it forms addresses.

## Hierarchy

```
qnet_top
 |- central_controller
 |   |- sync_fifo           instruction queue
 |   |- target_decoder      M x subnet_decoder + nc_decoder: nodes an instruction will occupy
 |   `- ni_tx               link serializer
 |- ni_rx                   link deserializer, broadcast to all subnets
 `- subnet  x M
     |- subnet_decoder      first level (subnet address)
     |- nc_decoder          second level (node controller address)
     `- node_controller x K
```

`qnet_pkg` holds the opcode and scheme enums, the instruction and command
structs, and the sizing functions (`addr_bits`, `delta_cycles`, `rho`,
`issue_cycles`, `exec_cycles`, `node_id`).

## Parameters of `qnet_top`

| parameter | default | meaning |
|---|---|---|
| `ENC` | `SUBID_NCBIT` | address encoding scheme |
| `N_NODES` | 1024 | node controllers (2048 for the fully distributed mapping) |
| `N_SUBNETS` | 128 | M; K = N_NODES / N_SUBNETS |
| `LINK_W` | 16 | data wires of the link |
| `FIFO_DEPTH` | 16 | instruction queue depth (power of two) |
| `N_QUBITS` | 3 | qubits per node (3 semi-distributed, 2 fully distributed) |

The address port is `addr_bits(ENC, M, K)` wide. For example, mode (32, 32)
is `ENC = SUBBIT_NCBIT, N_NODES = 1024, N_SUBNETS = 32`.

At the defaults the synthesized design has about 100k word-level cells and
257k flip-flop bits. Most of it is the 1024 node controllers. Each of them
holds an 11-bit timer, three 16-bit phase frames and two pipeline registers
of about 60 bits.

## Simulation

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops with `$finish`. With
Verilator 5:

```
verilator --binary --timing --assert rtl/qnet_pkg.sv tb/tb_qnet_top.sv \
    -y rtl -y tb --top-module tb_qnet_top -Wno-fatal
./obj_dir/Vtb_qnet_top
```

| testbench | checks |
|---|---|
| `tb_subnet_decoder` | all addresses, all subnets, three schemes, single-subnet mode |
| `tb_nc_decoder` | the ID example (1011b selects controller 11); the bitmap example (0010100110110111b selects 0,1,2,4,5,7,8,11,13); random addresses |
| `tb_ni_tx` | word order and content, issue length 2 + delta + params with delta = 2, gap-free back-to-back issue |
| `tb_ni_rx` | reassembly, one-cycle delivery, zeroed unused parameters |
| `tb_node_controller` | busy length per opcode, command latency 3, MW/RF choice, virtual-Z frame per qubit, R_Y quarter turn, measurement report |
| `tb_subnet` | selection under two schemes, measurement values |
| `tb_central_controller` | serial spacing 5+62+2, pipelined spacing 5, parallel targets, never addressing a busy node (independent node model) |
| `tb_qnet_top` | end to end in three configurations, one per scheme, including a delta = 1 mode; run times of all sequence types against the formulas; every mechanism counted |
| `tb_qnet_workload` | three R_Y / R_Z layers over 32 logical qubits (64 nodes), decomposed onto node pairs; run time equal to a reference schedule, pulse counts, angles and phase frames per qubit |
| `tb_qnet_top_full` | the same sequence on the default 1024-node build (a few minutes, mostly compile time) |

`tb_qnet_harness` is not a testbench of its own. It drives one `qnet_top`,
plays the compiler's part in forming addresses, and is shared by the two
end-to-end benches.

Verilator's lint reports two kinds of warning. Both stand on purpose:

* unused address bits in the decoders: each decoder looks only at its half
  of the address;
* `SYNCASYNCNET` on `rst_n`: the reset is asynchronous and is also used to
  disable the assertions.

## Where this design stops and where it goes beyond the source

* **Not built.** These parts are not logic, or the source gives no logic for
  them:
  * the RF and MW signal generators;
  * the entanglement and readout hardware;
  * the qubits themselves.

  Their command interface is the `cmd` port of every node, and the readout
  comes back on `meas_bit`.
* **The compiler is software.** Scheduling, decomposition and the subnet
  pass are not part of this RTL. The instruction stream is expected to be
  scheduled and marked for parallel execution already.
* **Program flow control of the central controller is not specified.** That
  covers branches, loops, and feed-forward of a measurement into a
  classically controlled gate. Only the issue path, the dependency check and
  the collection of outcomes are built. A CX between qubits on two nodes
  ends with gates that depend on measured values. Such a program therefore
  needs a host that reads `meas_result` and then streams the matching
  instructions.
* **Own choices.** The source describes the following only by function or
  cost, so they are our own:
  * the link word layout, the `link_valid` wire, and the one-cycle receive
    register;
  * how the pipeline is split into stages;
  * the phase-frame format;
  * the busy return path and the two-cycle serial turnaround;
  * the FIFO;
  * asynchronous active-low reset.
* **Entanglement has a fixed duration.** It takes the average 1160 cycles;
  variable heralding is not modelled.
* **Two address widths are taken from the axis labels.** For subID_ncBIT
  the source's text writes W_NC = N, and for subBIT_ncID W_NC = log2 N. Its
  own rho = K and its mode labels (for example (7, 8) and (16, 6) at
  N = 1024) need W_NC = K and log2 K. The RTL follows the labels.

## Capacity

With two nodes per logical qubit, the default 1024-node build holds 512
logical qubits. That is enough for all benchmark programs the source
evaluates, which use 130 to 433 logical qubits. The fully distributed
mapping uses four nodes per logical qubit and needs `N_NODES = 2048` for the
larger ones. Program length is not limited, because instructions stream in
through the FIFO.
