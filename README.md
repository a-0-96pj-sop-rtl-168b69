# A 20-core spiking-neural-network accelerator on a dodecahedral network-on-chip

This is synthesizable SystemVerilog for an edge-AI neuromorphic system-on-chip. The chip has three parts:

- a spiking-neural-network (SNN) accelerator with 20 cores;
- a small CPU attachment that programs and starts the accelerator;
- an external-memory subsystem that holds the state the cores do not keep on chip.

The design has two central ideas.

1. **Keep only a little on chip per neuron.** Each synapse is stored as a 4-bit *index* into a per-core table of 16 shared weights, not as a full weight. Only the index rows and the membrane potentials live in external SRAM. They are streamed in by two DMA engines while the cores compute. Inside a core, a *zero-skip* engine throws away every synapse whose input spike is 0 before any arithmetic is done. Work therefore scales with the number of active synapses, not the number of synapses.
2. **Connect the cores like the surface of a fullerene.** The 20 cores sit on the 20 corners of a dodecahedron. Its 12 pentagonal faces are level-1 routers. Every core touches 3 routers and every router serves the 5 cores of its face. A single level-2 router at the centre joins the 12 faces, and it has one off-chip (level-3) port. A spike leaving a core reaches any of 8 other cores in 2 router hops (core → face → core). Every core is reached in at most 4 hops (face → centre → face).

The RTL simulates the whole chip end to end at its full size: 20 cores of 8192 axons and 8192 neurons each, 163,840 neurons in total.

## Block map

```
                  CPU (not included) --- LSU port ---+
                                                     |
  sys_clk -> clk_manager -> CPU HF/HL clocks        enu  (custom-0 neuromorphic instructions)
                 |  NoC clock                        |
                 v                                 nbus  (address decode, addr[31:28])
     +------------------+------------+-------------+-----------+------------+
     |                  |            |             |           |            |
 neuro_controller  fullerene_noc  output_buffer  ext port   clk regs
 (timestep FSM)    20 x neuro_core               of ext_mem_if
                   12 x cmrouter (L1)                 ^
                   1  x l2_router  <-> L3 port        |  priority: MPDMA > IDMA > bus
                        |    ^                        |
                  MP port    weight-index rows   ext_mem_if  <-> async SRAM pins
                        v    |                        ^
                      mpdma  idma (20 async FIFOs) ---+
```

| File | Block |
|---|---|
| `snn_pkg.sv` | Sizes, packet and bus structs, register maps. It also holds the dodecahedron face table `FACE` and the helpers that derive the wiring from it. |
| `neuro_core.sv` | One core, built from `core_regtable`, `clock_gate`, `core_cache`, `zspe`, `dual_spe`, `neuron_updater` and `core_controller`. |
| `cmrouter.sv` | Level-1 router with a connection matrix. It uses `sync_fifo` buffers and a clock gate. |
| `l2_router.sv` | Centre router with 12 face ports and 1 level-3 port. |
| `fullerene_noc.sv` | The 20 cores, 12 routers and centre router, wired from `FACE`. |
| `idma.sv`, `async_fifo.sv` | Index DMA. It has one dual-clock FIFO per core. |
| `mpdma.sv` | Membrane-potential DMA. |
| `ext_mem_if.sv` | Arbiter and asynchronous-SRAM strobe generator. |
| `output_buffer.sv` | Data combiner and 4 × 200 spike counters. |
| `neuro_controller.sv` | Runs the timesteps. |
| `enu.sv`, `nbus.sv` | Instruction unit and bus. |
| `clk_manager.sv` | Clock dividers, clock gates and CPU sleep/wake. |
| `neuro_soc.sv` | Top level. |

## The core: from spikes to membrane potentials

A core holds up to 8192 neurons. All of them share the core's 8192 input axons. A timestep runs neuron by neuron:

1. **Fetch V(t-1).** The controller asks the MPDMA for the neuron's 32-bit membrane potential and loads it into the accumulator of the dual SPE.
2. **Wait for the index row.** The weight-index cache has two banks. Each bank holds one neuron's row: `ceil(synapses/16)` groups of 16 four-bit indices. The IDMA fills one bank while the core reads the other. When the current neuron is finished, its bank is released.
3. **Zero-skip (ZSPE).** For each 16-axon group, the controller reads 16 spike bits from the spike cache and the 16 matching indices. The ZSPE keeps only the indices whose spike bit is 1 and packs them into a 19-entry FIFO. A group with no spikes costs one cycle and produces nothing. A group is accepted only if the FIFO has room for all its surviving indices; otherwise the ZSPE stalls.
4. **Accumulate (dual SPE).** The FIFO hands out up to 4 indices per cycle to whichever synapse process engine is free. The engines are SPE-A and SPE-B, and `spe_free` = `2'b10` means A is busy and B is free. The engine looks up the 4 shared weights and sums them with an 18-bit adder tree. The next cycle it adds the sum to the 32-bit V_MP. The two engines alternate, so one group of 4 is taken every cycle.
5. **Update.** When the FIFO and both engines are empty, the neuron updater works out V − leak. It fires if the result is ≥ threshold. It then resets by one of three modes: to zero, by subtracting the threshold, or not at all.
6. **Write back and send.** V(t) goes back through the MPDMA. A spike leaves either to the core's target router, as packet `{dst=0, src=core, nid=neuron}`, or, in an output-layer core, to the data combiner with its network number.

The shared weights can be 4, 8 or 16 bits wide. Each is sign-extended from its low W bits. The number of shared weights can be 4, 8 or 16, and the index is masked to 2, 3 or 4 bits. Both sizes are set per core by the `WCFG` register.

**Spike cache and timesteps.** The spike cache is two banks of 8192 bits. Spikes that arrive from the routers during timestep *t* are written into the *write* bank. At the next timestep start the banks swap: the full bank becomes the read bank, and the old read bank is cleared in one cycle through per-word valid bits. A spike produced in timestep *t* is therefore consumed in timestep *t+1*, in both the first and later layers.

**Clock gating.** Each core gates its own clock with a latch-based clock gate. The enable is `enable && !reset`. The configuration registers stay on the ungated clock, so a disabled core can still be programmed. A disabled core refuses router input, and that stall propagates back through the network (see hang-up below).

## The network: connection-matrix routers on a dodecahedron

`FACE[f][k]` lists the 5 cores around face *f*. The wiring is derived from it:

- core *c*'s router *r* (0..2) is the *r*-th face that contains *c*;
- the core sits on port `core_port(f,c)` of that router;
- its *home router* is the lowest-numbered face containing it.

The table was found by enumerating the 5-cycles of the dodecahedron's vertex graph. The average degree of the 32 nodes is (20·3 + 12·5)/32 = 3.75, with variance 0.94.

**Level-1 router (`cmrouter`).** The router has six input buffers: 5 core ports and the level-2 port. A fixed-priority arbiter, port 0 first, moves one packet into a spike-data register. The connection matrix has one row per input core port, and each row holds 5 five-bit destination core IDs; `'1` means empty. The router mode selects how a row is used:

- **P2P:** only entry 0 is used.
- **Broadcast:** every valid entry is used.

The packet then goes out as follows:

- A destination that is a core of this face goes to that core's output buffer, with `dst` set.
- Any other destination goes to the level-2 port.
- A packet that arrives from level 2 goes to the output buffer of its `dst` core.

In each cycle, every local output buffer and the level-2 port can take at most one copy of the packet. Two rows that name the same destination *merge* those spike streams.

**Hang-up.** An input buffer stops accepting packets while any of these holds:

- its link is disabled;
- it is full;
- for a core port, the neighbour core's timestep counter differs from the router's own.

The last rule keeps a fast core from injecting spikes into a timestep the router has not reached.

**Level-2 router.** It has 12 face ports and the off-chip port. A packet for core *d* (*d* < 20) goes to *d*'s home face, and any other `dst` goes off chip. Off-chip input spikes use the same format, with `dst` = core and `nid` = axon. That is how a layer's inputs enter the chip.

**Router registers.** Each router's bus registers hold:

- its ID and a valid bit (the router's clock runs only when it is valid and a link is enabled);
- link enables;
- the mode;
- the neighbour list;
- a status word with the timestep and the per-neighbour sync bits;
- the five matrix rows.

## Memory streaming: IDMA, MPDMA and the external-memory interface

External SRAM word addresses (32-bit words):

| Region | Address |
|---|---|
| membrane potential of core *c*, neuron *n* | `MP_BASE + c·8192 + n` (`MP_BASE` = 0) |
| weight-index word *w* of core *c*, neuron *n* | `WIDX_BASE + (c·8192 + n)·1024 + w` (`WIDX_BASE` = `0x100000`) |

Word *w* of a row holds the indices of axons 8w..8w+7, 4 bits each, with the lowest axon in the lowest nibble.

- **IDMA.** A timestep start arms the IDMA. It then walks the cores round-robin, copying each core's rows in neuron order into that core's dual-clock FIFO, which the core reads in its gated clock domain. It reads memory only when the FIFO has room. It disarms itself when every row of the timestep has been fetched.
- **MPDMA.** It serves one read or write of V at a time, lowest requesting core first, through an output (request) buffer and an input (data) buffer.
- **`ext_mem_if`.** It arbitrates with fixed priority: MPDMA, then IDMA, then the CPU bus. It drives CE#, OE# and WE# low for `WAIT+1` cycles with a stable address. Read data is captured at the end of that window, and WE# rises on the last cycle, which writes the SRAM.

## Control: instructions, bus, timesteps and clocks

**ENU (extended neuromorphic unit).** The CPU issues custom-0 instructions (opcode `0001011`) through a shared load/store port. The unit requests an instruction, decodes it, runs it over the bus and answers with a result or an error flag.

| funct3 | Instruction | Operation |
|---|---|---|
| 0 | NCFG | write `rs2` to bus address `rs1` |
| 1 | NRD | read bus address `rs1` |
| 2 | NEN | write core *c*'s enable register from `rs1[c]`, for all 20 cores |
| 3 | NSTART | write the timestep count `rs1`, then start |
| 4 | NSTAT | read the network status word |

**Bus map.** `addr[31:28]` selects the target:

- 0: controller;
- 1: cores, with core = `addr[11:7]` and register = `addr[6:0]`;
- 2: routers, with the same layout;
- 3: output buffer, with network = `addr[11:10]` and neuron = `addr[7:0]`; writing bit 31 clears all;
- 4: external memory;
- 5: clock manager.

**Neuromorphic controller.** The controller's registers are:

- CTRL: 1 = start, 2 = abort;
- TIMESTEPS;
- CORE_MASK;
- STATUS: `{timestep[15:0], state, busy, done}`.

A run repeats the following sequence:

1. *Switch* issues a one-cycle `ts_start` to every core, router and the IDMA.
2. *Run* waits until every masked core reports done.
3. *Drain* waits until the routers and the IDMA are idle, so that no spike of this timestep is still in flight.

After the last timestep, *finish* raises an interrupt.

**Clock manager.** It makes four clocks from `sys_clk`: CPU high-frequency, CPU low-frequency, NoC and IDMA. Each has a divider (0 = bypass, *k* = divide by 2*k*) and a clock gate. The CPU high-frequency clock is gated off when the CPU signals sleep. It comes back on at the next timestep switch or at network completion.

## Interfaces of the top level (`neuro_soc`)

- **ENU port:** `enu_lsu_req_o`, `enu_instr_valid_i`/`enu_instr_i`/`enu_rs1_i`/`enu_rs2_i`, and `enu_rsp_valid_o`/`enu_rsp_data_o`/`enu_rsp_err_o`. The CPU presents an instruction when `enu_lsu_req_o` is high and waits for the one-cycle response.
- **CPU clocks:** `cpu_sleep_i`, `cpu_hfclk_o`, `cpu_hlclk_o`, `cpu_asleep_o`, `irq_ts_o`, `irq_done_o`.
- **Level-3 spike ports:** `l3in_*` and `l3out_*`, valid/ready with `spike_pkt_t`.
- **Asynchronous SRAM pins:** `sram_ce_n`, `sram_oe_n`, `sram_we_n`, `sram_addr`, `sram_dq_o`/`sram_dq_oe`/`sram_dq_i`.
- **`idma_clk_o`.** The IDMA clock is generated and brought out, but inside this design the IDMA runs on the NoC clock (see departures).

## Simulation

There is one self-checking end-to-end test, `tb/tb_neuro_soc.sv`. It runs the top at its full default size and uses a behavioural SRAM, `tb/async_sram_model.sv`. In that model, unwritten weight-index words return a fixed hash of their address, so the test data is generated rather than stored.

The testbench plays the CPU:

- It programs 4 cores and router 0. Cores 0 and 9 are layer 1. Core 0 broadcasts to core 13 (same face) and to core 5 (through the centre router). Core 9 merges into core 13.
- It injects input spikes off chip while the cores are still disabled, which forces the hang-up back-pressure.
- It runs 3 timesteps in broadcast mode and 2 more in P2P mode, putting the CPU to sleep each time.
- It compares every output counter and every final membrane potential with a reference model of the same network.

It also counts each mechanism and fails if one never happens: zero-skip, SPE alternation, broadcast, merge, level-2 routing, hang-up, clock gating, sleep/wake, mode switch, memory contention and timestep switches. ZSPE stalls and IDMA back-pressure depend on the random stimulus, so they are only reported (the ZSPE unit test checks the stall).

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_neuro_soc \
  rtl/snn_pkg.sv rtl/*.sv tb/async_sram_model.sv tb/tb_neuro_soc.sv
./obj_dir/Vtb_neuro_soc
```

The run takes about 7,000 cycles and well under a second.

There are also unit tests, each self-checking against an independent model. Every test prints `TB_RESULT checks=… failures=…`.

| Test | Block under test |
|---|---|
| `tb_zspe` | zero-skip engine |
| `tb_dual_spe` | the two synapse engines |
| `tb_neuron_updater` | neuron updater |
| `tb_core_regtable` | core register table |
| `tb_sync_fifo` | synchronous FIFO |
| `tb_async_fifo` | dual-clock FIFO |
| `tb_clock_gate` | clock gate |
| `tb_l2_router` | level-2 router |
| `tb_output_buffer` | output buffers |
| `tb_ext_mem_if` | external-memory interface, with the SRAM model |

The remaining blocks are checked through the end-to-end test:

- core cache, core controller and core;
- level-1 router and the NoC;
- IDMA and MPDMA;
- controller, ENU, bus and clock manager.

## Where this design departs from, or adds to, the original chip

- **Not included:**
  - the RISC-V CPU, its ITCM/DTCM and its debug module;
  - the always-on domain;
  - the serial interface;
  - the external SRAM itself;
  - the pads.

  They are reached through the top-level ports listed above.
- **One neuron in flight per core.** The core finishes one neuron before it reads the next neuron's V. The original pipelines these steps more deeply, so peak throughput here (about one 4-synapse group per cycle while streaming, plus per-neuron memory latency) is lower than the reported 0.627 GSOP/s per core at 200 MHz.
- **Router throughput is not calibrated.** The level-1 router serves each output buffer at most once per cycle. The reported 0.2, 0.3 and 0.4 spikes/cycle for the P2P, 1-to-2 and 1-to-3 broadcast modes are not reproduced.
- **Hop count.** The average hop count from a core in this wiring is 3.05, against the 3.16 reported for the original.
- **Clocking.** All neuromorphic logic runs from the NoC clock, with per-core and per-router clock gates. The IDMA FIFOs are written on the NoC clock and read on the gated core clocks. The separate IDMA clock is generated but only brought out.
- **Own choices.** The following are choices made here, not taken from the original:
  - the register maps and instruction encodings;
  - the packet format;
  - the memory layout;
  - the leak, output-network and reset-mode fields;
  - the choice of 4 indices per SPE group;
  - the arbitration priorities;
  - the one-cycle bank clear;
  - the hash-generated test data.
- **Assertions.** These are immediate assertions inside clocked blocks, checked while out of reset. They cover:
  - the ZSPE FIFO never overflows;
  - both SPEs are never busy at once;
  - a disabled core never writes its spike cache;
  - the ENU only accepts an instruction when it asked for one.

  Because they sample `rst_n` synchronously, lint reports `rst_n` as used both synchronously and asynchronously. That is intended.
