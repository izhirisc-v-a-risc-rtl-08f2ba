# IzhiRISC-V: a RISC-V core that updates an Izhikevich neuron in one instruction

Simulating a spiking neural network on an ordinary processor spends most of
its time on the same few lines of arithmetic: for every neuron and every
timestep, one Forward Euler step of the two Izhikevich equations

    dv/dt = 0.04 v^2 + 5 v + 140 - u + I        du/dt = a (b v - u)
    if v >= 30 mV:  v <- c,  u <- u + d

and one step of the exponential decay of its synaptic current,
`dI/dt = -I / tau`. Written with base RV32IM instructions that is about 19
operations per neuron. IzhiRISC-V folds that work into the execute stage of
a small three-stage RISC-V pipeline: a Neuron Processing Unit (NPU) and a
Neuron Decay Unit (DCU) sit beside the ALU, and four custom instructions
drive them. `nmpn` advances one neuron by one timestep in a single cycle,
writes the new state back to memory and returns its spike bit; `nmdec`
decays one current in a single cycle. Everything else (connectivity, spike
delivery, input) stays ordinary software.

This repository holds synthesizable SystemVerilog for the core, following
the architecture published as *IzhiRISC-V - a RISC-V-based Processor with
Custom ISA Extension for Spiking Neuron Networks Processing with Izhikevich
Neurons* (Szczerek and Podobas, KTH). The publication describes the
instruction set, the datapath of the NPU and DCU and the pipeline
organisation; it leaves out, among other things, the instruction encodings
beyond the opcode, the spike threshold, the rounding, the cache
organisation and the bus protocol. Where this RTL had to fill such a gap it
says so below and in the opening comment of each file.

## The neuromorphic instructions

All four use the RISC-V *custom-0* major opcode `0001011` and the R-type
field layout (rd `[11:7]`, funct3 `[14:12]`, rs1 `[19:15]`, rs2 `[24:20]`).
Values are signed 16-bit fixed point: `v`, `u` and `c` in Q7.8 (8 fraction
bits), `a`, `b` and `d` in Q4.11, synaptic currents in Q15.16 (32 bits).

| instr | funct3 | rs1 | rs2 | rd |
|-------|--------|-----|-----|----|
| `nmldl` | 000 | `[31:16]` b, `[15:0]` a | `[31:16]` d, `[15:0]` c | 1 (done) |
| `nmldh` | 001 | bit 1 pin, bit 0 h | unused | 1 (done) |
| `nmpn`  | 010 | VU word: `[31:16]` v, `[15:0]` u | I (Q15.16) | read: address of the VU word; written: spike (1/0) |
| `nmdec` | 011 | I (Q15.16) | tau (divider 2..8) | decayed I |

The operand layout is the published one; the funct3 values are this
design's choice (the publication gives none), in the order the instructions
are listed there. funct7 is ignored.

`nmldl` and `nmldh` write the *NM REGS*, a small configuration register set
beside the ALU: the four neuron parameters, the timestep bit `h`
(0: 0.5 ms, 1: 0.125 ms) and the `pin` bit. The values stay until they are
reloaded, so a program that processes neurons of several types reloads them
per neuron (the code below) and one with a single type loads them once.

`nmpn` is the unusual one. It has three register operands: rs1 and rs2 as
usual, and rd, which is read in decode like a source register and written at
writeback like a destination. In execute the NPU computes the new VU word
while the ALU forms the address `rd + 0`; the memory stage stores the new
VU word at that address, as a store instruction would, and writes the spike
bit into rd. The old address in rd is therefore lost, which is why the
published example copies it first:

```
    lw    a6, 4(a3)        # {b, a}
    lw    a7, 8(a3)        # {d, c}
    nmldl x0, a6, a7       # load a, b, c, d
    lw    t5, (a4)         # external (thalamic) input
    lw    a7, (a0)         # synaptic current
    lw    a6, (a3)         # VU word
    add   a7, a7, t5
    add   a2, x0, a3       # a2 <- address of the VU word
    nmpn  a2, a6, a7       # update, store VU word at (a2), a2 <- spike
```

## Inside the NPU: one Euler step in fixed point

The NPU (`rtl/npu.sv`) is one block of combinational logic. The timestep is a
power of two, so multiplying by `h` is an arithmetic right shift by
`hs` = 1 (0.5 ms) or 3 (0.125 ms). With `V`, `U` the integer codes of v and u
(value = code / 256), `A`, `B`, `D` the codes of a, b, d (value = code /
2048), `C` the code of c and `I` the code of the current (value = code /
65536):

* The whole right-hand side of dv/dt is summed exactly in a 64-bit
  accumulator with 32 fraction bits:
  `2621*V^2 + (5V << 24) + (140 << 32) - (U << 24) + (I << 16)`.
  `2621/65536` is the constant 0.04 (0.039993). The new potential is
  `V' = V + (sum >>> (24 + hs))`: a single rounding, towards minus infinity.
* For u, `A * (B*V - (U << 11))` is exact with 30 fraction bits and
  `U' = U + (that >>> (22 + hs))`.
* If `V' >= 30*256` (30 mV) the neuron spikes: the instruction returns 1,
  `v = c` and `u = U' + (D >>> 3)` (d brought to Q7.8).
* Otherwise, if `pin` is set and `V' < C`, v is held at c. This stops the
  potential from rebounding below the reset value, which the original
  authors found to help the Sudoku solver converge.
* v and u are saturated to 16 bits and packed back into a VU word.

The spike test is made on the updated potential, so the reset happens in
the same instruction that crosses the threshold. The threshold, the 0.04
constant, the rounding and the saturation are this design's choices; the
equations, formats, shift-based timestep, reset rule and pin rule are the
published ones. Note that one of the published discrete equations reads
`u(n+1) = a h (b v(n) - u(n)) + v(n)`; the RTL uses `+ u(n)`, the Forward
Euler step of the continuous equation printed beside it.

A 1 ms network timestep, as in the published 80-20 experiment, is two
`nmpn` with `h` = 0.5 ms.

## Inside the DCU: dividing by shifting

`nmdec` computes `I - (I / tau) h`. The DCU (`rtl/dcu.sv`) has no divider:
it forms `I >>> 1` to `I >>> 9` and adds a fixed subset chosen by tau, the
published approximation table:

| tau | sum | value |
|-----|-----|-------|
| 2 | x>>1 | 0.5 |
| 3 | x>>2 + x>>4 + x>>6 + x>>8 | 0.33203 |
| 4 | x>>2 | 0.25 |
| 5 | x>>3 + x>>4 + x>>7 + x>>8 | 0.19922 |
| 6 | x>>3 + x>>5 + x>>7 + x>>9 | 0.16602 |
| 7 | x>>3 + x>>6 + x>>9 | 0.14258 |
| 8 | x>>3 | 0.125 |

Every entry is within 0.4% of 1/tau. The sum is then shifted by `hs` (the
timestep in NM REGS) and subtracted from I. The instruction returns the
decayed current, not the decrement. A tau outside 2..8 leaves the current
unchanged. The publication is not consistent here: it gives tau as "1...9"
in one place and supported dividers "/2 to /8" in another; the RTL follows
the table. Each shifted term is truncated on its own, so the result can be
a few LSBs (of 2^-16) above the exact value.

## The pipeline

```
 Fetch/Decode (merged)             Execute                  Memory+Writeback (merged)
 PC -> I-cache -> decoder          ALU  (address, RV32IM)   D-cache / Avalon master
          -> register file (3R)    NPU  (nmpn)              load align / extend
          -> reg/fwd bypass        DCU  (nmdec)             register file write
          -> branch unit -> PC     NM REGS (nmldl/nmldh)
```

* **Fetch and decode share one stage.** The instruction cache is read
  combinationally from the PC, and the decoder, immediate extender,
  register file read and branch unit all follow in the same cycle. A taken
  branch or jump loads the PC at the next edge, so no instruction is ever
  fetched down the wrong path and there is nothing to flush. The price is a
  long first-stage path (cache, decode, register read, compare, PC mux).
* **Execute** is one cycle for every instruction: the multiply and divide
  of the M extension are combinational, and so are the NPU and DCU. `nmldl`
  and `nmldh` write NM REGS at the end of their execute cycle, so an `nmpn`
  right behind them already uses the new values.
* **Memory and writeback share one stage.** A load that hits returns its
  data in the same cycle it is written to the register file.

**Hazards.** The instruction in decode reads up to three registers. If any
of them is the destination of the instruction in execute, decode is held for
one cycle and a bubble goes into execute (`forwarding_unit`, output
`hazard_stall`); this is the stall rule the original core uses. In the next
cycle the producer is in memory+writeback, and each of the three read ports
takes the value being written back instead of the register file output (the
"reg/fwd" multiplexers). So a dependent instruction directly behind its
producer costs one cycle, one further behind costs nothing. Because
branches resolve in decode on bypassed operands, the same rule covers them.
There is no forwarding path from the output of execute. The publication
also mentions forwarding "from the Execute" stage but states the stall rule
above for its measured hazard stalls; with that rule such a path would never
be used.

**Other stalls.** An instruction cache miss holds the PC and feeds bubbles
into execute until the word arrives. A data cache miss, or any store waiting
for the bus, freezes all three stages.

The core's ports `retire` (an instruction completed this cycle) and
`hazard_stall` make IPC and the hazard-stall share, the figures the
publication reports, easy to count.

## Caches and bus

Both caches (`icache`, `dcache`) are direct mapped with one 32-bit word per
line and 1024 lines (4 KiB) each, and read their arrays combinationally. The
data cache is write-through without write allocation: every store, and the
VU-word store of `nmpn`, goes out on the bus, and updates the line if it is
present. Each cache has an Avalon-MM master using basic transfers: the
request is held with its address stable while `waitrequest` is high, and
read data is taken in the cycle `waitrequest` is low. There is no burst and
no pipelining. Assertions in both caches check the hold rule.

None of this is specified by the publication, which only names the caches
and reports hit rates above 96%. Their sizes (`ICACHE_LINES`,
`DCACHE_LINES`) are parameters. With one-word lines a sequential program
misses once per instruction on first use; larger lines would be the obvious
change.

The published systems join two cores (on an Intel MAX10) or up to 64 (on an
Agilex-7) to on-chip RAM and an SDRAM controller over a shared Avalon bus.
Those parts are vendor components and are not in this repository. Each core
presents two Avalon-MM masters, instruction and data, to whatever
interconnect is used; there is no coherence between the caches of different
cores.

## Two networks on one core

Two testbenches run complete spiking networks as RISC-V programs on the core
at its default parameters. Every neuron's state and parameters are kept in
memory as three words (the VU word, `{b,a}` and `{d,c}`), next to a 32-bit
synaptic current. The inner loop per neuron and per 1 ms timestep is:

```
lw     {b,a}, {d,c}       ; nmldl  -> NM REGS
lw     I_syn, I_ext, VU
add    I = I_syn + I_ext
nmpn   VU, I -> mem[rec] ; first 0.5 ms, spike bit to rd
lw     VU                 ; reload the updated word
nmpn   VU, I -> mem[rec] ; second 0.5 ms
nmdec  I_syn              ; synaptic decay, tau = 4
sw     I_syn
(if either nmpn spiked: append the neuron to the fired list)
```

After all neurons have been updated, the program adds each fired neuron's
outgoing weights to the synaptic currents of its targets. The testbench
computes the same network with the integer reference model. Every step's
spike count, every final VU word and every final current must match exactly.

**80-20 network** (`tb_network_8020`): Izhikevich's 2003 cortical network,
with 1000 neurons (800 excitatory, 200 inhibitory), random parameters per
neuron, dense random weights and noisy thalamic input.
* The testbench runs 500 timesteps, about 90 M cycles and a minute of
  Verilator time.
* A 1000-step run of the same program took 176 M cycles and fired at
  11.5 Hz per neuron, with IPC 0.65.
* The effective IPC, which counts each `nmpn` as the 19 base instructions it
  replaces, was 0.85.
* The published single-core measurement for 1000 steps is 7.87 s at 30 MHz,
  or about 236 M cycles, with IPC 0.57 and effective IPC 0.65.

About 24% of the cycles here are hazard stalls, against under 1% reported
for the original. That difference comes from this program's scheduling.
Its loads feed the next instruction, and the three-stage pipeline has no
execute-stage forwarding. The program was not reordered to hide this.

**Sudoku WTA** (`tb_sudoku_wta`): a winner-takes-all network with one neuron
per (cell, digit).
* A spike inhibits the other digits of its cell and the same digit in its
  row, column and box.
* The given digits get extra drive, and all neurons get noise, which makes
  the network search.
* Spikes are delivered through per-neuron target lists, not a dense matrix.
* Every 100 ms the most active digit of each cell is read out, and the
  puzzle counts as solved if one such window matches the solution.
* `BOX = 2` (a 4x4 board, 64 neurons) is the default. It is solved within
  300 ms for every seed tried.
* `BOX = 3` with `T_STEPS = 2000` gives the 729-neuron 9x9 network. The core
  still matches the reference bit for bit, and two of four seeds tried
  reached the solution after 1.1 s.
* The drive, noise and weight values are simple hand-picked ones, not a tuned
  9x9 solver.

## What the RTL does not have

* No traps, CSRs or counters. The core is described as RV32IMZ without saying
  which Z extension is meant; this RTL implements RV32IM. FENCE, ECALL,
  EBREAK, CSR instructions and undefined encodings execute as no-ops.
* No misaligned-access handling; loads and stores are assumed aligned.
* No self-modifying code: the instruction cache does not see stores.
* Reset (`rst_n`, synchronous, active low) starts fetching at
  `RESET_PC` (default 0) and clears the register file, NM REGS and the cache
  valid bits.
* Because the reset is synchronous, the bus outputs mean nothing until the
  first clock edge with `rst_n` low. Memories and interconnect must stay in
  reset at least that long.

## Files

| file | contents |
|------|----------|
| `rtl/izhi_pkg.sv` | opcodes, funct3 of the custom instructions, control word, NM REGS record, load/store helpers |
| `rtl/izhirisc_core.sv` | the core: pipeline registers, stalls, operand muxes, result muxes |
| `rtl/pc_unit.sv` | PC, +4, next-PC mux |
| `rtl/icache.sv`, `rtl/dcache.sv` | caches with Avalon-MM masters |
| `rtl/control_unit.sv`, `rtl/extender.sv` | decoder, immediate generator |
| `rtl/regfile.sv` | 32 x 32, three read ports, one write port |
| `rtl/branch_calc.sv` | branch condition and target |
| `rtl/forwarding_unit.sv` | hazard stall and write-back bypass select |
| `rtl/alu.sv` | RV32IM ALU, single-cycle multiply and divide |
| `rtl/nm_regs.sv`, `rtl/npu.sv`, `rtl/dcu.sv` | the neuromorphic extension |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_izhirisc_core.sv` | whole core running RV32IM checks and a small network |
| `tb/tb_network_8020.sv` | 1000-neuron 80-20 network program on the core |
| `tb/tb_sudoku_wta.sv` | Sudoku winner-takes-all network program on the core |
| `tb/avalon_mem_model.sv` | two-port memory with random wait states |
| `tb/rv_asm_pkg.sv` | instruction encoders used to assemble test programs |
| `tb/izhi_ref_pkg.sv` | integer reference model of `nmpn` and `nmdec` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/izhi_pkg.sv tb/rv_asm_pkg.sv tb/izhi_ref_pkg.sv tb/tb_izhirisc_core.sv \
    --top-module tb_izhirisc_core -Mdir obj_core
./obj_core/Vtb_izhirisc_core
```

Replace the top module for any other testbench. The testbenches assemble
their programs with the functions of `rv_asm_pkg` and fill the memory model
directly, so no files are read.

What is checked:

* **Units**: each module against a model written in the testbench: ALU
  against 64-bit arithmetic, branch unit, decoder field by field, immediates
  by encode/decode round trip, register file, hazard and bypass rules,
  caches against a reference memory with random wait states.
* **NPU**: 4000 random neurons (spiking, resting, pinned, both timesteps)
  against the Euler step in floating point with the same quantised
  parameters; the unit's result must lie within one Q7.8 step below the
  exact value. A hand-worked case (regular-spiking neuron at rest:
  v = -65, u = -13, I = 0, h = 0.5 ms gives v = -66.5134, code -17028) is
  checked exactly.
* **DCU**: exact for inputs whose shifts lose nothing, within 5 LSB
  otherwise; coefficients within 0.5% of 1/tau.
* **Core**: RV32IM results (arithmetic, mul/div/rem, byte stores and signed
  and unsigned byte loads, jal, jalr, auipc, a loop) and a network of 8
  neurons of four types over 20 timesteps with per-neuron parameters,
  alternating `h` and `pin`, an inhibited neuron, and a spike counter kept
  both by arithmetic and by a branch on the spike bit. Final VU words,
  currents and spike counts must equal an integer reference. The test
  counts and requires hazard stalls, bypasses, cache misses, bus waits,
  taken branches, spikes, pinning and all four custom instructions, and it
  checks that each cycle without a completed instruction is accounted for by
  a stall.
* **Networks**: the two network programs above, compared exactly with the
  reference model; the Sudoku board must also come out as the puzzle's
  solution.
