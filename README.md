# HH-PIM: a heterogeneous-hybrid processing-in-memory block

HH-PIM is a processing-in-memory (PIM) accelerator for edge AI. It mixes
two kinds of difference in one device. The aim is that one device can run
neural-network inference either fast or frugally, and switch between the
two at run time.

- **Heterogeneous compute.** There are two clusters of PIM modules:
  - a *high-performance* (HP) cluster, built for a high supply voltage;
  - a *low-power* (LP) cluster, built for a low supply voltage.

  Each cluster has its own controller. The two clusters work in parallel.
- **Hybrid memory.** Every module holds two banks next to its
  multiply-accumulate unit:
  - an STT-MRAM bank, which is non-volatile, cheap to keep and slow to write;
  - an SRAM bank, which is fast and costs leakage.

Software decides where each layer's weights live: HP-MRAM, HP-SRAM, LP-MRAM
or LP-SRAM. It can power-gate the memory kinds it does not use.
- When the demand is high, weights go to SRAM and are spread over both
  clusters.
- When the demand is low, weights go to LP-MRAM, and the rest can be
  switched off.

The hardware described here provides what that software needs:
- compute instructions that take any mix of MRAM and SRAM operands;
- data-placement instructions that move weights between banks, modules and
  clusters;
- per-memory-kind power gates.

All of it sits behind an AXI4-Lite slave and an instruction queue. The RTL
is SystemVerilog-2017. It is synthesizable, apart from the testbenches and
the assertions.

```
              AXI4-Lite (from the host core)
                       |
                +--------------+
                | hhpim_axi_if |  INSTR0..3, STATUS, RDATA, PWR, ILLEGAL
                +--------------+
                   |        ^ host-read data (4-deep FIFO)
                   v        |
                +--------------+
                | instr_queue  |  16 entries, in-order, SYNC barrier
                +--------------+
                 |            |
        HP instr v            v LP instr
  +---------------------+   +---------------------+
  | pim_cluster (HP)    |   | pim_cluster (LP)    |
  |  pim_controller  <--+---+-> pim_controller    |  inter-cluster byte lanes
  |   |  |  |  |        |   |   |  |  |  |        |  (one per module, each way)
  |  M0 M1 M2 M3        |   |  M0 M1 M2 M3        |
  +---------------------+   +---------------------+
    M = pim_module: 64 kB MRAM + 64 kB SRAM + MAC PE
```

## Memory kinds and their timing

The four memory kinds differ only in latency. The PEs differ the same way.
A single bank model, `pim_mem_bank`, serves all four kinds through its
latency parameters.

The latencies are the access times of a 1.2 V (HP) and a 0.8 V (LP)
implementation. They are converted to clock cycles at one cycle per
0.25 ns and rounded up. The relative speeds therefore stay as measured.

| kind | MRAM read | MRAM write | SRAM read | SRAM write | MAC (PE) |
|------|-----------|------------|-----------|------------|----------|
| HP, ns | 2.62 | 11.81 | 1.12 | 1.12 | 5.52 |
| HP, cycles | 11 | 48 | 5 | 5 | 23 |
| LP, ns | 2.96 | 14.65 | 1.41 | 1.41 | 10.68 |
| LP, cycles | 12 | 59 | 6 | 6 | 43 |

Bank port: every memory port in the design is one byte wide and uses the
`mem_req_t` / `mem_rsp_t` pair.

- **Request.** The request is `valid`, `we`, `sram`, a 16-bit `addr` and
  `wdata`. It is held until `ack`.
- **Accept.** A bank accepts a request in a cycle in which it is idle.
  The array is read or written at that edge.
- **Acknowledge.** `ack` comes exactly LAT cycles after the accept cycle,
  with `rdata`.
- **Spacing.** Back-to-back accesses are therefore LAT+1 cycles apart.

A power-gated bank still acknowledges. It returns zero and drops writes.

The loss of SRAM contents on power-down is not modelled. Software must
treat SRAM as empty after gating it.

## The PIM module

`pim_module` holds:
- one MRAM bank and one SRAM bank (64 kB each);
- a MAC processing element, `pim_pe`: signed INT8 × INT8 into a 32-bit
  accumulator;
- the module interface, `pim_module_if`.

The interface runs three commands from the controller.

| command | what it does | cycles until `done` (command cycle = 0) |
|---------|--------------|------------------------------------------|
| LOAD | Reads `cnt_m` weights from MRAM at `addr_m`. Then reads `cnt_s` weights from SRAM at `addr_s`. Then reads `cnt_m+cnt_s` inputs from SRAM at `addr_in`. | 3 + cnt_m·(MR+1) + cnt_s·(SR+1) + (cnt_m+cnt_s)·(SR+1) |
| EXEC | Optionally clears the accumulator, then runs one MAC per weight/input pair. | 3 + k·(PE+1), or 4 + k·(PE+1) with clear |
| STORE | Writes the accumulator to SRAM at `addr_out..addr_out+3`, least significant byte first. | 3 + 4·(SW+1) |

In the table, k = cnt_m+cnt_s and must not exceed VLEN = 16.

The split of one dot product between MRAM and SRAM weights is free. This is
what lets software place part of a layer's weights in each bank.

A module touches one bank at a time. MRAM and SRAM operands of one module are
never fetched in parallel.

The module also has a byte-wide MEM port. The controller uses it to place
data and for host access.
- The port is served only while no command is running.
- A command that arrives during a port access waits for that access to end.
- A port access that arrives during a command is held (no `ack`) until the
  command finishes.

## The controller

`pim_controller` is the same RTL for both clusters. It takes one
instruction at a time (`instr_valid` / `instr_ready`). It is built from six
parts:

- **Instruction Decoder** (`instr_decoder`, combinational). Splits the
  instruction into:
  - the category;
  - the instruction field: op bits, counts, addresses, immediate;
  - the Module Select Signal, one bit per module.

  It also flags illegal instructions:
  - a compute instruction with more than VLEN operands;
  - any instruction with no module selected;
  - SYNC, which the queue should have absorbed.

  An illegal instruction is dropped after DECODE and counted.
- **State Machine** (`ctrl_fsm`). Runs the cycle IDLE → FETCH → DECODE, then:
  - LOAD → EXEC → (STORE) → IDLE for compute;
  - ALLOC → IDLE for moves and host accesses.

  Each phase issues its command exactly once and moves on when the phase
  reports done.
- **Command Encoder** (`cmd_encoder`). Builds the module command of the
  current phase from the field.
- **CMD Interface Logic** (`cmd_if`). Sends the command to the selected
  modules only. It keeps a pending mask and reports `all_done` one cycle
  after the last selected module's `done`. The modules of a cluster
  therefore compute in parallel and finish in step, each on its own
  operands.
- **Data Allocator** (`data_allocator`), with its Address Generator
  (`addr_gen`) and Data Rearrange Buffer (`rearrange_buf`). Runs MOVE and
  HOST instructions (next section).
- **MEM Interface Logic** (`mem_if`). Has one byte lane per module towards
  this cluster's modules, and one per module towards the other cluster
  (next section).

A compute instruction takes FETCH + DECODE, plus the slowest selected
module's LOAD, EXEC and STORE, plus one cycle of the CMD Interface Logic per
phase.

Measured full-size examples with four modules selected:

| instruction | HP cycles | LP cycles |
|-------------|-----------|-----------|
| 16 MRAM weights | 715 | |
| the same 16 weights from SRAM | 619 | |
| 8 MRAM + 8 SRAM weights, one module | 667 | 1023 |

## Instruction set

Instructions are 128 bits. The host writes them as four 32-bit words.

| bits | field | COMPUTE | MOVE | HOST |
|------|-------|---------|------|------|
| 127:126 | cat | 0 | 1 | 2 (3 = SYNC) |
| 125:123 | op | [0] clear acc, [1] store result | [0] src SRAM, [1] dst SRAM, [2] dst in other cluster | [0] read, [1] SRAM bank |
| 122 | cluster | 0 HP, 1 LP | source cluster | cluster |
| 121:114 | mod_sel | modules that compute | source modules | modules written (broadcast) / read (lowest set) |
| 113:106 | cnt_m | MRAM weights | length [15:8] | – |
| 105:98 | cnt_s | SRAM weights | length [7:0] | – |
| 97:82 | addr_a | MRAM weight address | source address | byte address |
| 81:66 | addr_b | SRAM weight address | destination address | – |
| 65:50 | addr_c | input vector (SRAM) | – | – |
| 49:34 | addr_d | result address (SRAM) | – | – |
| 33:0 | imm | – | [2:0] module offset | [31:0] write data |

The MAC computes acc = (clear ? 0 : acc) + Σ w[j]·x[j]:
- w[0..cnt_m-1] come from MRAM;
- w[cnt_m..] come from SRAM;
- x[j] are the inputs in SRAM at `addr_c`.

Leaving the clear bit off accumulates across instructions, so dot products
longer than 16 can be built. Leaving the store bit off skips the STORE phase.

## Data placement: moving weights between banks and clusters

A MOVE copies `len` bytes. The source is bank `op[0]` at `addr_a` of every
selected module. The destination is bank `op[1]` at `addr_b` of module
(lane + offset) mod N:
- in the same cluster when `op[2]` is 0;
- in the other cluster when `op[2]` is 1.

Typical uses:
- MRAM → SRAM inside each module, to speed up a layer (offset 0);
- HP → LP, to shift work to the frugal cluster;
- rotation between modules, for rebalancing.

The allocator works in chunks of BUF_DEPTH = 16 bytes:

1. **Read phase.** All selected source lanes are read in parallel, one byte
   per lane per step, into the lane's row of the rearrange buffer. Each byte
   is tagged with its destination module.
2. **Write phase.** Each destination module takes its bytes from whichever
   source row is tagged for it, again in parallel.
3. **Repeat.** The address registers step on, and the next chunk follows
   until `len` bytes are done.

A destination that is busy simply does not acknowledge. The data then waits
in the buffer, and the source side is never blocked mid-byte.

Traffic between clusters goes over dedicated byte lanes: HP lane *l*
connects to the LP controller's entry for module *l*, and the other way
round. In the receiving controller, `mem_if` arbitrates each module between
two requesters:
- its own allocator;
- the incoming lane.

The own side wins. A granted request keeps the lane until it is
acknowledged.

If the module is running a command, its port holds the request off. An
incoming byte for a busy module therefore *stalls*, and the waiting shows on
the `in_wait` outputs. This is how a weight move into the LP cluster can be
issued while LP is still computing on other data.

HOST instructions use the same path:
- **Write** stores a 32-bit value byte by byte into every selected module,
  which is a broadcast.
- **Read** fetches 4 bytes from the lowest selected module and hands them
  to the AXI read FIFO.

## Instruction queue and the SYNC barrier

`instr_queue` holds 16 instructions in order. The head goes to the HP or LP
controller according to its cluster bit, when that controller is idle.

Dispatch is in order. Consecutive instructions for different clusters
therefore run concurrently, and a run of instructions for one cluster is
serialised.

A SYNC instruction at the head is held until both controllers are idle, and
is then discarded. Software puts a SYNC between a cross-cluster move and the
first instruction that uses the moved data.

When the queue is full, the AXI write to INSTR3 is not accepted until a
slot frees, which is ordinary AXI back-pressure.

## Host interface (AXI4-Lite)

The slave supports single-beat reads and writes only, with no IDs. Byte
strobes apply. All responses are OKAY.

| offset | register | access | meaning |
|--------|----------|--------|---------|
| 0x00–0x0C | INSTR0..3 | R/W | instruction bits [31:0] … [127:96]; writing INSTR3 pushes the whole instruction |
| 0x10 | STATUS | R | [5:0] queue count, [8] HP busy, [9] LP busy, [14:12] read-FIFO count, [16] queue empty |
| 0x14 | RDATA | R | pops the next host-read word (0 when empty) |
| 0x18 | PWR | R/W | power gates, 1 = on: [0] HP-MRAM, [1] HP-SRAM, [2] LP-MRAM, [3] LP-SRAM; reset 0xF |
| 0x1C | ILLEGAL | R | [15:0] HP, [31:16] LP illegal-instruction counts |

A write is accepted when AWVALID and WVALID are both high, and BVALID follows
one cycle later. A read answers one cycle after the handshake.

When both clusters offer host-read data in the same cycle, HP data enters
the FIFO first.

A typical layer, with software choosing the placement:

1. Write weights and inputs with HOST writes, or move them into place with
   MOVE.
2. Gate the unused memory kinds through PWR.
3. Issue COMPUTE instructions to both clusters, interleaved so that both
   stay busy.
4. SYNC when one cluster's results feed the other.
5. Read the results with HOST reads and RDATA.

## How software is expected to drive it

Which weights go where is decided outside this block. The host runs a
dynamic-programming (knapsack) search over:
- the four memory kinds;
- their latency and energy per access;
- the time each inference may take in the current time slice.

The search is done once per application, into a look-up table. Each time
slice, the host picks the table entry that meets that slice's demand. It
then issues MOVE instructions for the difference from the current placement
and gates the memories the new placement leaves empty.

The hardware only has to make every placement executable and
power-gateable, and that is what it provides.

A layer is split over modules by giving each module a slice of every output
neuron's weights and the matching slice of the inputs. Each module leaves
a partial sum in its SRAM. The host reads the partial sums and adds them.

`tb_layer_placement` runs a fully-connected slice of 8 outputs × 64 inputs
both ways:

| placement | weights | PWR | cycles |
|-----------|---------|-----|--------|
| peak | 10 per HP module and 6 per LP module per output, all in SRAM | all on | 3234 |
| low-power | all 16 per LP module in LP-MRAM | HP-MRAM and HP-SRAM off | 8578 |

In the peak placement, HP and LP MAC instructions are interleaved, and the
HP:LP split makes both clusters finish together. The switch between the two
placements is:
- per output, one HP-SRAM → LP-MRAM cross-cluster move and one
  LP-SRAM → LP-MRAM move;
- then a SYNC;
- then a PWR write that gates the HP memories.

The cycle counts are from the full-size block.

## Sizes and capacity

The default configuration is:
- 4 HP and 4 LP modules;
- 64 kB MRAM and 64 kB SRAM per module;
- 1 MiB of weight storage in total: 512 kB SRAM and 512 kB MRAM;
- a 16-operand MAC buffer, a 16-byte rearrange buffer per lane and a
  16-entry queue.

The INT8 models this kind of device targets fit comfortably. Each needs
from about 100 k weights (EfficientNet-B0, MobileNetV2) to 256 k weights
(ResNet-18). Even an all-SRAM placement fits, and it uses at most half of
the SRAM.

Size after generic synthesis, against the FPGA prototype of the original
design:

| part | this RTL | prototype |
|------|----------|-----------|
| one PIM module: storage | 1,048,576 memory bits (64 kB MRAM + 64 kB SRAM) | 32 block RAMs |
| one PIM module: flip-flops | 422 | about 1,050 |
| one controller: flip-flops | 284 | 875 |
| whole block: memory bits | 8.39 Mbit | |
| whole block: flip-flop bits | 4,146 | |

The memory matches. The flip-flop counts are lower because this RTL
chose byte-serial datapaths: a 16-entry operand buffer and byte-wide
lanes. The original's datapath widths are not published, so the two cannot
be compared further.

## Where this RTL departs from, or goes beyond, the source design

These are own choices, made where the source design is silent:
- the instruction encoding, the module command format, and the byte-wide
  memory ports;
- the 32-bit accumulator and the result byte order;
- the SYNC barrier;
- chunked moves with lane rotation;
- the AXI register map and the read FIFO;
- the in-order queue;
- the arbitration rule for incoming cross-cluster traffic.

The behaviour follows the source design in these points:
- the two identical controllers, each with its decoder, state machine,
  command encoder, CMD and MEM interface logic and data allocator;
- the FETCH-DECODE-LOAD-EXECUTE-STORE cycle;
- the variable MRAM/SRAM operand counts;
- serial bank access inside a module;
- a MEM bandwidth of one lane per module;
- power gating per memory kind.

The memory and PE timing is a latency model, not a circuit. Voltage,
energy and leakage are not modelled at all. Power gating only blocks
access.

The host core, the interconnect, the system memory and the placement
software are not part of this RTL.

## Files

Design (`rtl/`):

| file | contents |
|------|----------|
| `hhpim_pkg.sv` | types, instruction layout, latency constants |
| `pim_mem_bank.sv` | MRAM / SRAM bank with latency and power gate |
| `pim_pe.sv` | INT8 MAC processing element |
| `pim_module_if.sv` | module interface: LOAD / EXEC / STORE, MEM port |
| `pim_module.sv` | one PIM module |
| `instr_decoder.sv` | controller part |
| `ctrl_fsm.sv` | controller part |
| `cmd_encoder.sv` | controller part |
| `cmd_if.sv` | controller part |
| `addr_gen.sv` | controller part |
| `rearrange_buf.sv` | controller part |
| `data_allocator.sv` | controller part |
| `mem_if.sv` | controller part |
| `pim_controller.sv` | the controller |
| `pim_cluster.sv` | controller + N modules |
| `instr_queue.sv` | instruction queue with SYNC |
| `hhpim_axi_if.sv` | AXI4-Lite slave |
| `hhpim_top.sv` | the whole block |

Testbenches (`tb/`): one self-checking testbench `tb_<module>.sv` per
module, plus `tb_layer_placement.sv` (the layer run above).
`hhpim_tb_pkg.sv` holds instruction builders.

`tb_hhpim_top` runs the full-size block, at default parameters, through AXI
against a reference model. It checks:
- host writes;
- concurrent HP and LP MACs;
- an HP→LP move that stalls on a computing LP cluster;
- an LP→HP move that also rotates data across the modules;
- SYNC;
- an MRAM→SRAM move;
- SRAM-faster-than-MRAM and HP-faster-than-LP timing;
- LP-SRAM power gating;
- an illegal instruction;
- queue-full back-pressure;
- a final read-back.

Each of these mechanisms is counted.

Each testbench prints `TB_RESULT checks=<n> failures=<m>`, and has a
watchdog.

Simulation with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hhpim_pkg.sv tb/hhpim_tb_pkg.sv \
    tb/tb_hhpim_top.sv --top-module tb_hhpim_top
./obj_dir/Vtb_hhpim_top
```

Verilator finds the remaining modules by file name through `-Irtl`.
