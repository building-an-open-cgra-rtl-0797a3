# PACE: a clock-gated 8x8 CGRA with single-cycle multi-hop routing, in SystemVerilog

A coarse-grained reconfigurable array (CGRA) runs the inner loop of a program as a
fixed, compiler-built schedule on a grid of small processing elements (PEs). Every PE
replays a short list of instructions, one per cycle, and the list repeats every *II*
cycles (the initiation interval of the software-pipelined loop). There is no
instruction fetch from main memory, no branch prediction, no register renaming and
no flow control: the compiler decides in advance, cycle by cycle, what each PE computes
and where every value travels.

This design is such an array, in the form of the PACE chip: 64 PEs in an 8x8 grid made
of four 4x4 clusters, a 16-bit datapath, eight 8KB data memory banks on the two side
edges, and a controller through which a RISC-V host loads the configuration, moves
data and starts kernels. Three ideas set it apart from a plain mesh of PEs:

* **Single-cycle multi-hop routing.** Each PE's router is a crossbar whose outputs can
  be fed straight from its inputs without a register in between. A value can
  therefore cross several PEs in one clock cycle, and the PEs it crosses stay free to
  compute.
* **Distributed input registers instead of a register file.** Each of the four link
  inputs of a PE has a register that can catch a value and hold it for a later slot.
  So do the ALU's three inputs: operand A, operand B and the predicate.
* **Two kinds of clock gating.** Static gating switches off PEs that a kernel does not
  use. Dynamic gating uses NOP instructions that carry an idle count: while a PE
  waits, its compute clock stops and its configuration memory is not read, but its
  router keeps working.

The RTL covers the CGRA, the SoC interconnect and the 512KB on-chip SRAM. The RISC-V
core, its caches, the SDRAM controller and the peripherals are not included. Their buses
are ports of the top module `pace_soc`.

## Contents

| file | what it is |
|---|---|
| `rtl/pace_pkg.sv` | widths, the flit and instruction types, opcodes, bus types, address constants, `mk_instr()` |
| `rtl/pace_alu.sv` | the 16-bit predicated ALU and load/store request generation |
| `rtl/pace_router.sv` | the crossbar, the four input registers and the bypass selection |
| `rtl/pace_config_mem.sv` | a 32 x 64-bit configuration memory (0.25KB) |
| `rtl/pace_decoder.sv` | splits the instruction word into its fields and flags illegal words |
| `rtl/pace_idle_ctrl.sv` | the NOP idle counter and clock-enable logic |
| `rtl/pace_clock_gate.sv` | the latch-and-AND clock gate |
| `rtl/pace_pe.sv` | one PE |
| `rtl/pace_cluster.sv` | a 4x4 mesh of PEs |
| `rtl/pace_dmem.sv` | one 8KB dual-port data memory bank |
| `rtl/pace_cgra_ctrl.sv` | the AXI4-Lite register/memory interface and the run sequencer |
| `rtl/pace_cgra.sv` | four clusters, eight banks and the controller |
| `rtl/pace_axi_mux.sv` | the AXI4-Lite address decoder |
| `rtl/pace_sram.sv` | 512KB on-chip SRAM |
| `rtl/pace_soc.sv` | the top: interconnect, SRAM, CGRA |

Every file opens with a comment giving its interface and timing, and what in it
follows the published description and what is this design's own choice.

## Values on the links: flits

Everything that moves between PEs is a *flit*: a 16-bit data word plus one predicate
bit, `flit_t = {p, d[15:0]}`. The predicate bit means "this value is real". An
unrouted output carries `{0, 0}`. A value whose computation was predicated off also
carries `p = 0`. This is how control flow is turned into dataflow:

* An operation executes only if its predicate input holds `p = 1` and `d[0] = 1`,
  and every operand it uses has `p = 1`. If the predicate input is not routed, it
  counts as true.
* An operation that does not execute still writes its result register, but with
  `p = 0`. Downstream consumers then also do nothing.
* `SEL` merges two control paths. It takes A if A is valid, otherwise B.

A loop prologue needs no special code as a result. In the first iteration, operands
that come from later pipeline stages are still `p = 0`, so the operations that use
them, including stores, simply do not happen.

## The instruction word

Each PE holds 32 instructions of 64 bits. In slot *s* of every iteration it executes
instruction *s*.

| bits | field | meaning |
|---|---|---|
| 4:0 | `opc` | opcode (below) |
| 25:5 | `xbar` | seven 3-bit source selects: outputs N, E, S, W, then ALU A, ALU B, ALU predicate |
| 29:26 | `reg_we` | per direction N, E, S, W: capture the incoming link into its input register at the end of this cycle |
| 33:30 | `reg_sel` | per direction: use the input register instead of the live link this cycle |
| 49:34 | `konst` | 16-bit constant |
| 54:50 | `nop_cnt` | for NOP: number of idle cycles (0 is read as 1) |
| 57:55 | `alu_we` | per ALU input A, B, P: capture what the crossbar routes to it, at the end of this cycle |
| 60:58 | `alu_sel` | per ALU input: feed the ALU from its register instead of the crossbar this cycle |
| 63:61 | reserved | must be 0. Otherwise the word counts as illegal and is executed as a NOP that routes nothing |

Source select codes: 0 N, 1 E, 2 S, 3 W, 4 this PE's result, 5 the constant, 7 none.
Opcodes: NOP 00, ADD 01, SUB 02, MUL 03 (low 16 bits), AND 04, OR 05, XOR 06, SHL 07,
SRL 08, SRA 09, CMPEQ 0A, CMPNE 0B, CMPLT 0C, CMPGT 0D (signed; the result is 1 or 0),
SEL 0E, MOV 0F, LOAD 10, STORE 11. The published material fixes only the widths of the
opcode (5 bits) and of the router configuration (21 bits). The rest of the layout and
all codes belong to this design. `pace_pkg::mk_instr()` assembles a word.

## Routing: what happens inside one clock cycle

This part takes the most care when writing a schedule.

Each PE has a result register: the output of its last executed operation. It also
has four input registers, one per link direction, and three ALU input registers.
Everything else in a PE's router is combinational. In a given cycle:

1. Each direction's *effective input* is either the live link from the neighbour or
   that direction's input register (`reg_sel`).
2. Each of the seven crossbar outputs picks one source: an effective input, the
   result register, the constant, or nothing. Four of the outputs drive the links to
   the neighbours. Three feed the ALU (A, B, predicate). Each of the three either
   goes straight to the ALU or is replaced by its ALU input register (`alu_sel`).
3. The ALU computes from what it was given. At the clock edge the result register
   takes the ALU output (only on the gated clock, see below). Every input register
   whose `reg_we` bit is set takes its live link. Every ALU input register whose
   `alu_we` bit is set takes what the crossbar routed to that ALU input.

Because step 2 may forward an input straight to an output, a chain of PEs that all
forward in the same direction is one long combinational wire. A value produced in
PE (0,5)'s result register reaches PE (0,0) in the same cycle, through four PEs that
are meanwhile free to compute something else. One source can also drive several
outputs (multicast). The price is timing, and a rule for whoever writes the
configuration:

* **No combinational cycles.** A configuration in which a chain of bypasses closes on
  itself (E→W in one PE and W→E in its neighbour in the same slot, for example) is a
  loop without a register. The hardware does not check for it. The compiler must
  never produce it. Because such loops are *structurally* possible, verilator reports
  `UNOPTFLAT` on the mesh. That is expected.
* **Path length sets the clock.** The longest bypass chain the compiler uses is the
  critical path. The design puts no limit on it: an 8-PE row can be crossed in one
  cycle.
* **Latency of a value.** A result computed in slot *s* is visible to every PE in
  slot *s+1*, wherever it is routed. A value caught in an input register in slot *s*
  (`reg_we`) can be used in any later slot (`reg_sel`) until it is overwritten. The
  same holds for the ALU input registers (`alu_we`, `alu_sel`). A link register
  keeps a value that arrives on a link. An ALU register keeps an operand after the
  crossbar has picked it, from any source, including the PE's own result or the
  constant.

All these registers and the routing run on the free clock. They work even in a PE
that is clock-gated or statically disabled. A disabled PE can therefore still act as
a pure router, as in the example below.

## Clock gating and NOP windows

The result register of a PE, and the ALU feeding it, run on a gated clock from a
standard clock gate: a latch that is transparent while the clock is low, followed by
an AND gate (`pace_clock_gate`). The gate is open in a cycle when:

* the array is in its clear cycle, or
* the PE is statically enabled, the array is running, and the current instruction is
  not a NOP.

*Static enable* is one bit per PE, set by the host before a run (`CLKEN_LO/HI`).
A disabled PE never fetches an instruction after the clear cycle and never clocks its
result register. Its router still forwards according to the instruction it read in the
clear cycle (slot 0).

*Dynamic gating* uses NOP windows. A NOP with count *c* makes the PE idle for *c*
cycles, starting in the cycle where the NOP executes. During the window:

* the gated clock does not pulse;
* the configuration memory is not read, so the NOP's routing stays in force for the
  whole window;
* a local counter counts the window down.

In the last cycle of the window the configuration read resumes, at the slot the
sequencer is at by then. The compiler lays out the slots so that a NOP with count *c*
at slot *s* covers slots *s ... s+c-1* (modulo II). The instructions stored in those
slots are never executed. `pace_idle_ctrl` holds the counter. The window ends on
counter equality, so a window is exactly *c* cycles long even when it wraps past the
end of the II.

The published block diagram draws the router behind the clock gate. The text says the
routing logic stays ungated. This design follows the text: only the ALU/result side
of the PE is gated.

## The array

`pace_cluster` is a 4x4 mesh. `pace_cgra` joins four clusters into the 8x8 array.
Boundary links connect straight to the neighbouring cluster, so routing across a
cluster boundary is no different from routing inside one. Links at the outer edge of
the array are open (they read as "no value").

PE (row *r*, column *c*) has global index *8r + c*. The memory-capable PEs are
columns 0 and 7. Each bank is shared by two rows:

| bank | PEs (port A / port B) |
|---|---|
| *k* = 0..3 | (2k, 0) / (2k+1, 0) |
| 4 + *k* | (2k, 7) / (2k+1, 7) |

A memory PE issues a LOAD or STORE with the word address in operand A (low 12 bits)
and, for a store, the data in operand B. A LOAD's result register holds "data from
memory". The bank's read register provides the loaded word in the following cycle, so
a loaded value is visible one slot after the LOAD, like any other result. The two
ports of a bank are independent. If both write the same word in the same cycle, port A
wins. Loads read the old data.

## Running a kernel

The host sees the CGRA as a 1MB AXI4-Lite window. In the SoC this window is at
0x2000_0000.

| offset | register / window |
|---|---|
| 0x00 CTRL | bit 0: write 1 to start a run. Bit 1: interrupt enable |
| 0x04 STATUS | bit 0: busy. Bit 1: done (write 1 to clear) |
| 0x08 II | slots per iteration, 1..32 |
| 0x0C CYCLES | run length in cycles |
| 0x10 / 0x14 CLKEN_LO / HI | static clock enable of PEs 0..31 / 32..63 (reset: all on) |
| 0x18 CYCCNT | cycles executed by the last run |
| 0x10000 + pe·256 + slot·8 + {0,4} | configuration word, low / high 32 bits |
| 0x40000 + bank·0x4000 + word·4 | data memory word (16 bits, zero-extended) |

The sequence:

1. The host writes configuration and data. Memory accesses are allowed only while the
   array is idle; during a run they return SLVERR.
2. Writing CTRL starts the run. The array gets one *clear* cycle: result registers are
   invalidated and every PE reads slot 0.
3. Then CYCLES run cycles follow. The slot counter counts 0, 1, ..., II-1, 0, ...
4. Done is set, and the interrupt rises if it is enabled.

Write responses come one cycle after the handshake. Reads take two cycles.

## SoC

`pace_soc` decodes the CPU's AXI4-Lite bus:

| address | slave |
|---|---|
| 0x1000_0000, 512KB | on-chip SRAM (`pace_sram`) |
| 0x2000_0000, 1MB | CGRA |
| 0x4000_0000, 256MB | `periph_*` port (peripheral subsystem) |
| 0x8000_0000, 32MB | `sdram_*` port (SDRAM controller) |

Unmapped addresses are answered DECERR by the interconnect itself. Everything uses one
clock and an active-low asynchronous reset.

## A worked schedule: C[i] = A[i] + B[i]

Both end-to-end testbenches run this kernel, with II = 4, on two rows of the array.
The layout is shown for the left memory column. The CGRA testbench runs its mirror
image on bank 4.

| PE | slot 0 | slot 1 | slot 2 | slot 3 |
|---|---|---|---|---|
| (0,5) counter | `SEL(res, -1)` | `ADD res, 1` | send res west | – |
| (0,4)..(0,2) | – | – | forward E→W | – |
| (0,1) | – | – | forward E→W and E→S | – |
| (0,0) | (window) | (window) | `LOAD [E]` → A[i] | NOP ×3, route res south |
| (1,1) | `ADD Areg, 0x800` → &C[i-1] | send res west | `ADD N, 0x400` → &B[i], keep N in Areg | send res west |
| (1,0) | `ADD res, Nreg` | `STORE [E] ← res` | – | `LOAD [E]` → B[i], catch N in Nreg |

Things to notice:

* The index travels five hops, across a cluster boundary, in one cycle. The four PEs
  in between are statically *disabled* and only route.
* PE (0,1) sends the index both west and south (multicast).
* PE (1,1) keeps the index in its operand-A register from slot 2. In slot 0 of the
  next iteration it uses the index again for the store address, without a second
  transfer.
* PE (0,0) spends three of its four cycles in a NOP window.
* The first iteration's ADD and STORE find operands with `p = 0`, so nothing is
  stored.
* Running for 4·(N+1) cycles yields C[0..N-1].

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each compares
against a reference model written independently in the testbench, has a watchdog,
and ends with a `TB_RESULT checks=… failures=…` line:

* the ALU, decoder, router, clock gate, idle controller, configuration and data
  memories use randomized vectors;
* `tb_pace_pe` runs three small programs (bypass, register capture, predicated store,
  load, a 6-cycle NOP window, static disable) and counts gated clock pulses;
* `tb_pace_cluster` checks a 4-hop single-cycle path and multicast;
* `tb_pace_cgra_ctrl` checks the register map, run length, slot wrap, interrupt and
  error responses;
* `tb_pace_axi_mux` and `tb_pace_sram` check decoding, DECERR, byte strobes and
  slaves with delays;
* `tb_pace_cgra` runs the array-add kernel above (N = 100) through the AXI port;
* `tb_pace_gemm` multiplies two 8x8 matrices. It runs a hand-scheduled
  multiply-accumulate loop (II = 4) once per output element. The loop has a
  loop-carried sum in one PE's result register, started by a `SEL` against 0;
* `tb_pace_disparity` computes the sum of absolute differences of 200 pairs of
  values in one run. This is the core of the disparity kernel. The absolute value
  uses no branch. A comparison with 0 predicates a multiply by -1, and a `SEL`
  picks the negated value when it exists and the difference otherwise. The test
  counts how often the multiply ran and how often it was predicated off;
* `tb_pace_soc` runs the array-add kernel at full size through the CPU port of the SoC, with N = 256.
  The data is staged through the on-chip SRAM. It also reaches the SDRAM and
  peripheral ports. No parameter is overridden anywhere in the SoC.

The end-to-end tests count every mechanism and fail if any count is zero. The
mechanisms are: multi-hop transfers, multicast, ALU input register use, loads on both bank ports, stores,
predicated-off stores, NOP-gated cycles, static gating, the interrupt, DECERR and
SLVERR. They also check the run length: one clear cycle plus 4·(N+1) cycles.

To run a testbench with verilator:

    verilator --binary --timing --assert -Wno-fatal -Wno-UNOPTFLAT \
        rtl/pace_pkg.sv $(ls rtl/*.sv | grep -v pace_pkg) tb/tb_pace_soc.sv \
        --top-module tb_pace_soc
    ./obj_dir/Vtb_pace_soc

(The package is listed first.) The full-size SoC test takes about
20 seconds.

## Where this design departs from, or goes beyond, the published description

* **Instruction encoding, opcode set, predicate rule.** Only the field widths of
  opcode and router configuration are published. The layout, the opcode list, the
  "bit 0 of the predicate flit" rule and the SEL semantics are this design's own.
* **Data memory organisation.** Eight dual-port 8KB banks, four on each side of the
  array, each beside two rows, as the published block diagram and layout show. The
  memory total of the chip (80KB = 64×0.25KB + 8×8KB) matches. Two things are guesses:
  which row gets which port, and that the host shares port A.
* **Host interface.** The register map, AXI4-Lite (rather than full AXI4) and the
  address map are invented. The published design only says that the RISC-V core
  loads data and configuration memories and is signalled by interrupt.
* **Gating scope.** See "Clock gating" above: routing stays ungated, as the text
  says, not as the figure draws it.
* **NOP window semantics.** The published description says NOPs encode the start and
  end of an idle period and that a local counter tracks it. The PE diagram labels
  the counter's compare value "NOP count". Here the NOP carries that count, the
  window length, in a 5-bit field. The field width is this design's own.
* **Not built:** the RISC-V core with its 16KB I- and D-caches, the SDRAM
  controller, and the UART/SPI/I2C/GPIO/ADC/AES/RNG peripherals. Their function is
  only named, so they are represented by bus ports of `pace_soc`. The Morpher
  compiler that produces configurations is also not part of this RTL.
* **Clocking.** One clock domain. Pads, clock root and physical design are out of
  scope.

## Known tool messages

* `UNOPTFLAT` (verilator) on the PE mesh: the bypass network is combinational across
  PEs by design (see "Routing").
* The clock gate contains a latch by design.
* Unconnected observation outputs (`res_o`, `gclk_o`, `run_o`) of the CGRA inside
  `pace_soc` are there for testbenches and debug.
