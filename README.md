# SENeCA-style neuromorphic core and mesh in SystemVerilog

Spiking neural networks do little work per time step. Only the neurons that receive an event need updating, and only the neurons that cross a threshold send anything on. This design is a digital core built around that fact. A small general-purpose controller handles events one at a time. For each event it starts a short *micro-kernel*: a loop of simple arithmetic instructions. An array of eight SIMD neuron processing elements (NPEs) runs the micro-kernel over many neurons, using BF16 arithmetic. Results that should become spikes are captured as address events. The controller forwards them over a mesh network-on-chip to other cores.

The RTL covers one core (`seneca_core`) and a mesh of cores (`seneca_top`, 2 x 2 by default). Every part of the core is here except the controller: the NPE array, loop buffer, data and instruction memories, event generator, event FIFOs, NoC interface with routing table, and shared-memory prefetch unit. The mesh adds the routers and the arbiter in front of an external shared memory. The controller (a RISC-V processor) and the shared memory (an HBM device) are not part of the RTL. Their ports are brought out, so a processor core and a memory controller can be attached.

## The core at a glance

```
            controller bus (bus_*)            instruction port (im_*)
                 |                                   |
   +-------------+-----------------------------+  inst_mem 8K x 32
   |  register map / bus decode                |
   |    |            |             |           |
   | loop_buffer -> NPE 0..7 <-> data_mem  <-- prefetch_unit <-> shared memory
   |  (kernels,      (64 x 16b    port B        (port A when     (via arbiter)
   |   ADDR regs)     regs, ALU)  16 x 8 bits    the bus is idle)
   |        \            |
   |         \-> event_generator -> event FIFO ----> controller (irq_evt)
   |                                                 |
   |   controller -> NoC tx FIFO -> routing_table -> router (mesh)
   |   router -> NoC rx FIFO -> controller (irq_noc)
   +------------------------------------------------+
```

### NPE array and instruction set

Each NPE has 64 registers of 16 bits and a combinational ALU (`npe_alu`). All eight NPEs execute the same instruction in the same cycle. Each works on its own lane of the data memory: lane *l* of every data-memory row belongs to NPE *l*. The instructions are:

| group | ops | notes |
|---|---|---|
| BF16 arithmetic | ADD SUB MUL DIV | round to nearest even; subnormals flush to zero; NaN results are 0x7FC0 |
| compare / select | GTH EQL MAX MIN ABS | GTH and EQL return 1.0 or 0.0, so a compare can gate a value through MUL |
| bit ops | AND ORR SHL SHR | shift amount is `b[3:0]` |
| conversion | I2F RND | I2F converts an int16, one INT8 byte or one INT4 nibble; RND rounds halves away from zero |
| memory | MLD MST | load or store one row through the wide data-memory port |
| events | EVC | hand a value to the event generator |

Setting the `i8` bit switches the arithmetic and compare ops to two signed 8-bit lanes, with saturation.

An instruction is 30 bits: `{op[4:0], i8, rd[5:0], ra[5:0], rb[5:0], areg[1:0], inc[3:0]}` (`npe_instr_t` in `seneca_pkg`).
- ALU ops compute `rd <- ra op rb`.
- `MLD rd` loads the row held in address register `areg`. `MST` stores `ra` to that row. Both then add `inc` to the address register.
- For I2F, the `rb` field selects the source field:

  | rb | source |
  |---|---|
  | 0 | int16 |
  | 1 | byte 0 |
  | 2 | byte 1 |
  | 4–7 | nibbles 0–3 |

### Timing: one instruction per cycle, with a load bypass

The loop buffer issues one instruction per cycle to all NPEs.
- ALU results are written at the end of the issue cycle.
- The data memory is a synchronous SRAM, so an `MLD` result arrives one cycle after issue. It is written into the register file in that next cycle.
- If the instruction issued right after an `MLD` reads the loaded register, it takes the value straight from the memory output (the *load-use bypass*, visible on `obs_bypass`). It does not wait.
- If a load and an ALU op write the same register in the same cycle, the ALU result wins.

So a kernel of L instructions run for I iterations takes I x L cycles plus any EVC stalls. The core test checks this exact count.

### Loop buffer

The loop buffer (`loop_buffer`) holds up to 128 instructions and a table of 8 kernels (start, length). It also holds 4 address registers ADDR0–3 that point at data-memory rows.

The controller sets the iteration count and the address registers, then starts a kernel by number. The loop buffer replays the kernel body *iters* times, and `irq_done` pulses when it finishes. Because MLD and MST step their address register by `inc`, one kernel walks through consecutive rows of neurons or weights. This is how one small loop time-multiplexes the eight NPEs over thousands of neurons.

The only stall: an `EVC` issued while the event generator is still emptying the previous EVC's events waits (`obs_stall`).

### Events

For each NPE lane whose EVC value is non-zero, the event generator (`event_generator`) emits a 32-bit address event. The event is `{neuron address[15:0], value[15:0]}`. The address is `base + iteration x 8 + lane`, where *base* is a register the controller sets. So the spikes of a layer come out with the neuron numbers the controller assigned.

The generator emits one event per cycle into a 16-entry FIFO, and raises `irq_evt` while that FIFO is not empty.

### Network-on-chip

The controller pops events and pushes those that must leave into the NoC transmit FIFO. The routing table (`routing_table`, 64 entries) is indexed by address bits [15:10]. Each entry holds a valid bit, a destination core (x, y) and a new base address. The base replaces the address's upper bits, so the event arrives already numbered for the receiving core.

An event whose entry is not valid is dropped and counted (`obs_drop`). Valid events become 40-bit flits `{dx, dy, event}`.

Routers (`noc_router`) have five ports: local, N, E, S, W. They use dimension-order routing: first along x, then along y. Each input has a 2-flit buffer, each output a round-robin arbiter, and links are valid/ready. A flit that arrives at its destination core goes into that core's receive FIFO and raises `irq_noc`. Routing is deadlock-free and in order for each source and destination pair.

### Data memory, prefetch and shared memory

The data memory (`data_mem`) holds 8K words of 32 bits, with two ports:
- Port A (32 bits) serves the controller and the prefetch unit.
- Port B (8 x 16 bits, one row) serves the NPEs. A row is four 32-bit words; the word at address `4r + p` holds lanes `2p` (low half) and `2p+1` (high half) of row `r`.

The prefetch unit (`prefetch_unit`) copies a block of words between the external shared memory and the data memory, in either direction. It uses port A in cycles when the controller bus does not.

In the mesh, an arbiter (`shmem_arbiter`) gives the cores' prefetch units turns on the single shared-memory port:
- It arbitrates round-robin.
- It allows up to 8 outstanding reads.
- Read data always returns in request order, and each response goes to its requester.

The shared-memory port is a simple request/grant/rvalid protocol (`shm_req_t` / `shm_rsp_t`). Read data may arrive any number of cycles later, but in order.

## Controller register map

The controller reaches everything through one word-addressed bus:
- One access per cycle.
- A write is `bus_we` with `bus_wdata`.
- A read is `bus_re`; the data appears on `bus_rdata` with `bus_rvalid` one cycle later.

| address | access | function |
|---|---|---|
| 0x0000–0x1FFF | RW | data memory, 32-bit words |
| 0x2000 + i | W | loop-buffer instruction i |
| 0x2100 + k | W | kernel k: [7:0] start, [15:8] length |
| 0x2200 | W | iteration count |
| 0x2201 | W | event base address |
| 0x2202 | W | start kernel [2:0] |
| 0x2203 | R | status: see below |
| 0x2204 | R | pop one event from the event FIFO |
| 0x2205 | W | push one event into the NoC transmit FIFO |
| 0x2206 | R | pop one event from the NoC receive FIFO |
| 0x2207 / 0x2208 / 0x2209 | W | prefetch external address / local address / length |
| 0x220A | W | start prefetch; [0] = 1 writes back to shared memory |
| 0x2210 + r | RW | address register ADDRr |
| 0x2300 + e | W | routing entry: [24] valid, [23:20] x, [19:16] y, [15:0] base |
| 0x4000 + 64n + r | RW | register r of NPE n; n = 15 writes all NPEs |

The status register (0x2203) has these bits:

| bit(s) | meaning |
|---|---|
| 0 | kernel running |
| 1 | event FIFO empty |
| 2 | NoC receive FIFO empty |
| 3 | NoC transmit FIFO full |
| 4 | prefetch busy |
| 5 | event generator idle |
| [12:8] | events waiting |

Writes to NPE registers and address registers are ignored while a kernel runs.

Interrupts:

| line | meaning |
|---|---|
| `irq_evt` | events waiting |
| `irq_noc` | events received |
| `irq_done` | pulse: kernel finished |
| `irq_pf` | pulse: prefetch finished |

A typical event handler:
1. Write the NPE registers (for example a threshold, broadcast to all NPEs).
2. Write the address registers (weight row of the input neuron, state rows).
3. Write the iteration count (rows of neurons to update).
4. Start the kernel.
5. On `irq_evt`, pop the new events and forward them to the NoC.

## Micro-kernels

The test package `tb/tb_kernels_pkg.sv` contains eight micro-kernels written in this instruction set:
- integrate-and-fire: integration, and spike generation with reset;
- sigma-delta: sigma and delta, with quantisation by RND;
- Hebbian weight update: pre-synaptic and post-synaptic;
- e-prop: eligibility trace and weight update.

Each kernel is 4 to 10 instructions long. They show how to write a kernel, and the tests check every one against a reference interpreter.

Example: IF integration, with ADDR1 = weight row and ADDR2 = state row:
```
MLD R0, ADDR1, +1     ; weight
MLD R1, ADDR2, +0     ; state
ADD R1, R0, R1        ; the load of R1 is forwarded from memory
MST ADDR2, R1, +1
```

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `seneca_top` | `MESH_X`, `MESH_Y` | 2, 2 | choice (no core count given) |
| core | `N_NPE` | 8 | published |
| core | `NREGS` | 64 registers x 16 b | published |
| core | `DM_WORDS`, `IM_WORDS` | 8192 x 32 b each | published as 8KW x 32b |
| core | `LB_DEPTH`, `N_KERNELS` | 128, 8 | choice |
| core | `FIFO_DEPTH` | 16 | choice |
| core | `RT_ENTRIES` | 64 | choice |

The published description also calls these memories "2 Mb", which does not match 8K x 32 b (256 Kb). This design uses the 8K x 32 b organisation.

## What follows the published design and what does not

These come from the published design:
- the block structure;
- eight NPEs with 64 x 16-bit registers;
- BF16 arithmetic with INT8/INT4 data and a 2xINT8 mode;
- one instruction per cycle;
- the instruction list;
- kernels stored in a loop buffer that steps data-memory addresses;
- events captured in address-event form and sent over a mesh NoC;
- a shared memory reached through a prefetch unit and an arbiter;
- memory sizes, and the 32-bit event and shared-memory words.

These are this design's own choices:
- the instruction encoding;
- BF16 rounding and special values;
- what compares return;
- saturation in INT8 mode;
- the I2F field selector;
- the pipeline (a one-cycle load with bypass);
- the loop-buffer size and its 4 address registers;
- the event rule (non-zero value) and the address formula;
- the routing-table format;
- the XY router and its buffers;
- the prefetch and arbiter protocols;
- the register map and interrupts;
- the 2 x 2 mesh.

Not modelled:
- the controller processor;
- power and energy (the published work is mostly about energy per instruction);
- clock gating and sleep modes;
- multicast of one event to several cores (one routing entry gives one destination).

## Verification

Each module has a self-checking testbench in `tb/` that ends by printing `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb_npe_alu` | every op against double-precision arithmetic rounded to BF16 |
| `tb_npe` | random instruction streams against a register-level model, including the bypass |
| `tb_data_mem` | both ports |
| `tb_loop_buffer` | sequencing and the cycle count |
| `tb_event_generator` | event addresses and values |
| `tb_sync_fifo` | against a queue model |
| `tb_routing_table` | entry lookup |
| `tb_noc_ni` | event path through the NoC interface |
| `tb_noc_router` | random traffic in all directions |
| `tb_prefetch_unit` | both copy directions |
| `tb_shmem_arbiter` | contention with in-order read return |
| `tb_seneca_core` | all eight kernels against a reference interpreter, with the cycle count; INT8 mode, prefetch and write-back, NoC loopback with a dropped event, and the instruction memory |

`tb_seneca_top` runs the full 2 x 2 mesh at its default parameters:
1. Two cores prefetch weights from a behavioural shared memory at the same time.
2. Core (0,0) runs a 16-neuron integrate-and-fire layer and forwards its spikes two hops to core (1,1).
3. Core (1,1) integrates them into a second layer and fires.
4. Meanwhile core (0,1) streams events to core (1,0).

The mesh test checks the states and spikes of both layers against a reference. It counts EVC stalls, load bypasses, arbiter contention, prefetch completions, multi-hop deliveries and routing drops, and fails if any of them never happens.

`tb_hebbian_digits` runs a workload in the shape of the 8 x 8 digit-classification network on one core: 64 input pixels and 8 output neurons, with rate-coded input spikes. Each time step it integrates the input spikes and fires the outputs. It then updates the post-synaptic traces and applies the Hebbian update to the weights of every input that spiked. Weights, membranes, traces and events are checked against the reference at every step. It runs 6 time steps; a real run uses 100 per image.

To simulate with Verilator 5, compile the packages first, then the RTL, the shared-memory model and the testbench:
```
verilator --binary --timing --assert -Wno-fatal rtl/seneca_pkg.sv tb/tb_util_pkg.sv \
  tb/tb_kernels_pkg.sv $(ls rtl/*.sv | grep -v seneca_pkg) tb/shmem_model.sv \
  tb/tb_seneca_top.sv --top-module tb_seneca_top -o sim
obj_dir/sim
```
Replace `tb_seneca_top` with any other testbench name. All tests run in seconds to a minute.

Two limits apply to this verification. The tests are simulations, not a comparison with silicon. And the instruction timing, encodings and numeric corner cases are this design's, so they cannot match the original chip bit for bit.
