# Darwin3-style neuromorphic chip in SystemVerilog

This is RTL for a large spiking-neural-network processor. The processor is a 24 x 24 mesh of nodes. Node (0,0) is a management processor; the other 575 are neuron cores. Each core time-multiplexes up to 4096 neurons over one small, instruction-driven arithmetic engine.

Neurons and learning rules are not fixed in hardware. Each is a short program in a compact 16-bit instruction set, so LIF, Izhikevich, adaptive LIF or STDP-style rules are all software. Connectivity is kept in compressed tables, which lets a core with a few tens of thousands of memory words reach very large fan-in and fan-out. Spikes travel as small packets over a mesh network. Each packet carries the remaining (dx, dy) offset to its target, not an absolute address, so it can leave the chip at an edge without being rewritten.

The RTL follows the published architecture of the Darwin3 chip wherever that architecture is described in enough detail to build. Where it is not, this design makes its own choices. Those choices are listed below, and again in the opening comment of each file.

## How a time step works

A core does two kinds of work.

**Between time steps: spike events.** A packet arriving at a core names an axon-in *linker* and a source index. AER IN (`aer_in`) reads the linker and walks one of four compressed record forms:

| form | record | what it encodes |
|---|---|---|
| broadcast | `len` weights | one source to neurons 0..len-1 |
| shared | target ID, weight | one synapse whose weight many sources share |
| grouped | `len` target IDs, then one block of `len` weights per source index | convolution-like groups |
| range | first target ID, `len` weights | one source to a run of consecutive neurons |

Each synapse it finds adds its weight into that neuron's dendritic accumulator `h`. The accumulator uses a valid bit, so it reads as zero in a new step without clearing 4096 words.

**At each time step: neuron updates.** `tik_gen` toggles a global step line. In each core, `time_mgmt` detects the toggle, waits for AER IN to finish its current packet, and then holds further packets back. It then issues one *inference job* per configured neuron and, if learning is on, one *learning job* per plastic synapse.

For each job, `core_controller`:
1. reads the neuron's state row (state variables, parameters and constants), with the accumulated `h` added in;
2. runs the shared program;
3. writes back what the program stores.

When a neuron fires, its ID goes to AER OUT (`aer_out`). AER OUT walks that neuron's axon-out chain and sends one packet per entry, stopping at the entry whose *last* flag is set.

A learning job reads a synapse's learning row, its weight, and two flags:
- the pre-synaptic flag, set by AER IN when it delivered that weight;
- the post-synaptic flag, meaning the target neuron fired this step.

The job updates the synapse state and writes the weight back into axon-in.

## The instruction set and its datapath

Instructions are `{opcode[4:0], operand[10:0]}`. The ten primary instructions fall into three groups:

- **Load/store** move selected fields between memory rows and the register file:
  - `LSIS`, `LDIP`: neuron state, parameters and constants;
  - `LSLS`, `LDLP`: synapse state and learning parameters.
- **Update** instructions evaluate one sum of products each:
  - `UPTIS`: currents, conductance, adaptation;
  - `UPTVM`: membrane potential;
  - `UPTLS`: synapse state;
  - `UPTWT`: weight;
  - `UPTTS`: temporaries.
- **`GSPRS`** compares, fires, adapts and resets.

The operand's bits select which terms take part. For example, `UPTVM 0xD` is the LIF update `v = p0*v + p1*I + c0`, and `GSPRS 0xA` is compare-and-reset. Extended instructions `ADD SUB MUL ADDI MOV CMP JMP NOP END` give general arithmetic and control flow.

All updates run through `exec_unit`, a two-stage pipeline:
1. stage 1 multiplies an operand by a coefficient, or by its own previous product (for three-factor terms), or passes it through; a 1-bit flag can force the term to zero;
2. stage 2 accumulates.

A multiply therefore costs two cycles and an add one. A 3-term LIF update takes 4 datapath cycles and a 2-term CUBA-delta update 3; the testbenches check these counts.

How operand bits are read matters, and the published tables are ambiguous about it. These orders make the published examples come out right:
- `UPTVM` selector bits are read most-significant first: bit 3 = v, bit 2 = I, bit 1 = v_adp, bit 0 = c0.
- `GSPRS` bits are read least-significant first: bit 0 fire, bit 1 compare, bit 2 adapt, bit 3 reset.
- `UPTWT` takes the learning-parameter index from bits [10:9]. Bit 8-i then selects synapse-state word LS_i.
- LS2, LS5 and LS8 are loaded with the pre flag, the post flag and the reward. They act as 0/1 masks.

Numbers are 16-bit signed Q8.8. Products are truncated.

## Memories of a core

| memory | organisation | default depth |
|---|---|---|
| instructions | 16-bit words, one program shared by all neurons | 256 |
| neuron state | row of 17 halves per neuron: S0-S5, IP0-IP7, IC0-IC2 | 4096 |
| learning state | row of 27 halves per plastic synapse: LS0-LS9, LP0-LP7, LC0-LC7, target neuron | 1024 |
| axon-in | 32-bit words = two halves: linkers, records, weights | 65536 (big tile) / 28672 (small tile) |
| axon-out | 32-bit: one linker per neuron, then entry chains | 16384 |

The two axon-in sizes follow the chip's floor plan. In every group of 4 x 4 tiles, the columns with x mod 4 = 0 or 1 are big tiles and columns 2 and 3 are small. The plastic weights are a window of axon-in that starts at half address `lrn_wbase`; synapse k's weight sits at `lrn_wbase + k`.

A core is filled over a write-only configuration bus (`cfg_t`: target, address, data). The top routes that bus to one node, or to all of them. State-row and learning-row addresses are `{row, field[4:0]}`. Core registers:

| address | register |
|---|---|
| 0 | n_neurons |
| 1 | learn_en |
| 2 | n_syn |
| 3 | inference program start |
| 4 | learning program start |
| 5 | reset potential v0 |
| 6 | lrn_wbase |

## Network on chip

`router` has five ports: local, north, east, south and west.
- Routing is dimension-ordered XY on the remaining offsets. Each hop moves dx, then dy, one step toward zero, and (0, 0) means deliver to the local port. y grows southward.
- Each input has a 2-entry FIFO, and each output has a register and a round-robin arbiter. A packet crosses an idle router in 2 cycles.

`async_link` sits on every router-router and router-node connection. It stands in for the chip's asynchronous handshake interfaces and adds 2 cycles. A packet through N routers therefore takes 2N + 2(N+1) cycles. The top-level testbench measures this delay.

A packet is 40 bits: `{dx[6], dy[6], axon_id[16], index[12]}`.

## Files

Shared types:
- `rtl/d3_pkg.sv`: widths, opcodes, register map, packet and memory word formats.

Blocks:
- `rtl/exec_unit.sv`: the multiply/accumulate datapath.
- `rtl/core_controller.sv`: instruction fetch, decode and execute; job sequencing; row and weight write-back.
- `rtl/time_mgmt.sv`: tick detection, job issue, overrun counting.
- `rtl/aer_in.sv`, `rtl/aer_out.sv`: the spike input and output walks.
- `rtl/neuron_core.sv`: one node, holding the memories and the configuration registers.
- `rtl/router.sv`, `rtl/async_link.sv`: the network.
- `rtl/tik_gen.sv`, `rtl/reset_gen.sv`: the time-step generator and the reset synchroniser.
- `rtl/darwin3_top.sv`: the mesh.

The top exposes:
- the management-processor port of node (0,0), as `riscv_*`;
- the router ports on all four edges, for inter-chip links;
- configuration and status signals.

## Simulating

Each testbench checks itself and ends by printing `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert rtl/d3_pkg.sv rtl/*.sv tb/tb_router.sv --top-module tb_router
./obj_dir/Vtb_router
```

The unit testbenches are `tb_exec_unit`, `tb_core_controller`, `tb_time_mgmt`, `tb_aer_in`, `tb_aer_out`, `tb_router`, `tb_async_link`, `tb_neuron_core`, `tb_tik_gen` and `tb_reset_gen`. Each compares against a reference model written in the testbench.

`tb_darwin3_top` runs a two-layer network on a 3 x 3 mesh:
1. a packet from the management port makes 48 neurons fire at node (1,1);
2. their 48 spikes make 48 neurons fire at node (2,1);
3. those report back to the management port, and one packet leaves through the east edge.

It checks each spike and counts each mechanism:
- input stall;
- spike stall under back-pressure;
- time-step overrun;
- learning jobs;
- off-chip egress.

The defaults build the full 24 x 24 chip, and it passes lint at that size. It was not simulated, however. Verilator turns it into several hundred C++ files, and compiling them takes well over an hour on a small machine. The largest size simulated end to end is the 3 x 3 mesh above, with 64 neurons per core and reduced axon memories.

## Where this departs from the published design

- **Routing**: plain XY only. The congestion-aware CXY and OE-FAR strategies are not built.
- **Asynchronous interfaces**: modelled as a synchronous two-cycle pipeline. The whole chip runs on one clock, where the original lets each node run at its own frequency.
- **Extended instructions**: shifts, logic operations, WMOV, SA, TS, stack and memory access, DIV and EXP are not built.
- **Weights**: always 16 bits. Packing 1, 2, 4 or 8-bit weights into a half-word is not built.
- **Record layout**: the axon-in and axon-out bit layouts are this design's own. So is the choice to keep record lengths in the linker.
- **Learning memory**: plastic synapses have their own 1024-row memory. In the original design, learning state shares the axon-in memory. With 1024 rows, a large maze-solving network with STDP on every grid connection does not fit.
- **`UPTLS`**: adds the selected constant (`+ LC_n`) as the instruction table shows, not `C * flag` as the learning equation writes it.
- **Not present**: the management processor, the inter-chip compression units, pads, PLL and power management. The management processor and inter-chip units appear only as ports.
- **Program per core**: all neurons of a core run the same inference program, and all plastic synapses the same learning program. The original selects instructions by neuron ID, so different neurons in one core could run different programs. Here that needs one core per neuron type.
- **Configuration path**: memories are filled over a dedicated configuration bus that reaches every node directly. In the original, configuration arrives from an external host through the inter-chip links and travels over the mesh as packets.
- **Timing**: each instruction takes a fetch, a decode and an execute cycle. This is the design's own timing; only the datapath cycle counts follow the original.
