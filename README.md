# AMARETTO-style quantum circuit emulator in SystemVerilog

This is a hardware emulator for quantum circuits. It holds the complete state vector of an
`n`-qubit register on chip, as `2^n` complex amplitudes. It applies the gates of a circuit one
after the other, and streams the final amplitudes back to a host. The design follows the
AMARETTO architecture (a RISC-like emulator for small FPGAs, such as the AMD Kria KV260). It
supports up to 16 qubits, uses 20-bit fixed-point numbers, and offers Clifford+T and rotation
gates. It never builds a `2^n x 2^n` gate matrix. A single-qubit gate only mixes pairs of
amplitudes whose indices differ in the target bit. The emulator streams through those pairs
("couples") at one per clock cycle in a five-stage pipeline, so a gate costs `O(2^n)` cycles
and one small datapath.

The RTL here was written from the published description of that architecture. Parts the
publication leaves open are this design's own choices: the opcode values, the sine/cosine table,
the per-gate operand table, the FIFO depth and the stream format. They are listed in
[What is specified and what is chosen](#what-is-specified-and-what-is-chosen).

## The idea: butterflies instead of matrices

Number the amplitudes `c_0 ... c_{2^n-1}` by the binary value of the basis state. A gate `G`
on qubit `t` acts on every pair `(c_i, c_j)` with `j = i + 2^t` and bit `t` of `i` equal to 0:

```
c_i' = g_a c_i + g_b c_j
c_j' = g_c c_i + g_d c_j
```

For `t = 0` the pairs are (c0,c1), (c2,c3), and so on. For `t = 1` they are (c0,c2), (c1,c3),
and so on. Drawn as lines between amplitudes, the pairs form the butterfly of an FFT. The pairs
are independent, so they can be processed in any order and overlapped in a pipeline. A
controlled gate with control qubit `c` is the same operation restricted to the pairs whose bit
`c` is 1. It therefore has half as many couples. The instruction marks a gate as controlled by
naming a control qubit different from the target. If the two fields are equal, the gate is a
plain single-qubit gate.

### One formula for every gate

The datapath evaluates only one expression. Every real or imaginary part of the output couple
is

```
out = coefS * sin(theta) + coefC * cos(theta)
```

Each coefficient is one of `±Re c_i, ±Im c_i, ±Re c_j, ±Im c_j` or 0. `theta` is an angle
carried in the instruction. For rotation gates it is the rotation parameter. For fixed gates it
is a constant chosen so that sin and cos take the values needed: `theta = 0` gives cos = 1 and
sin = 0, and `theta = pi/4` gives `1/sqrt(2)` for both. The datapath is therefore four
computing units (Re c_i, Im c_i, Re c_j, Im c_j). Each has two multipliers and an adder. A
small decoder, the Datapath Control Unit (DCU), selects the eight coefficients from the
opcode:

| gate | theta in the instruction | c_i' | c_j' |
|---|---|---|---|
| X  | 0 | b | a |
| Y  | 0 | -i b | i a |
| H  | pi/4 | S a + C b | S a - C b |
| P(phi) (Z, S, T, S†, T†) | phi | a (not written) | b (C + iS) |
| RX(phi) | phi/2 | C a - iS b | -iS a + C b |
| RY(phi) | phi/2 | C a - S b | S a + C b |
| RZ(phi) | phi/2 | a (C - iS) | b (C + iS) |

Here `a = c_i`, `b = c_j`, `S = sin theta` and `C = cos theta`. The phase gate needs
`c_i' = a`, which this form cannot give once sin and cos are both non-zero. The DCU therefore
turns off the write-back of `c_i` for P instead. Z is P(pi), S is P(pi/2), T is P(pi/4). Any
gate of the list can be controlled, which gives CNOT, CZ, CY, CH, controlled phase and
controlled rotations. Other OpenQASM gates are meant to be decomposed into these by the host
compiler. The compiler is not part of this RTL.

## Numbers and angles

* **Amplitudes.** Real and imaginary parts are 20-bit two's complement with 18 fractional bits
  (Q2.18): 1.0 is `0x40000` and the range is [-2, 2). An amplitude is `{re, im}`, 40 bits
  (`amaretto_pkg::cplx_t`).
* **Rounding.** Each computing unit forms the exact 41-bit sum of two products. It then drops
  18 fractional bits with round-to-nearest, ties to even. Nothing saturates: for a unitary gate
  on a normalised state every result stays within ±√2.
* **Angles.** The 19-bit immediate is `theta/pi`, two's complement with 18 fractional bits,
  covering [-pi, pi). Read as an unsigned number, the same bits are `theta` as a fraction of a
  full turn. The trigonometric unit relies on this.

## Instruction set

An instruction is 32 bits (`amaretto_pkg::instr_t`):

```
 31    27 26    23 22    19 18                    0
+--------+--------+--------+-----------------------+
| opcode | target | control|       immediate       |
|   5    |   4    |   4    |          19           |
+--------+--------+--------+-----------------------+
```

| opcode | name | type | meaning |
|---|---|---|---|
| 0 | SETQ | s | set the qubit count to `immediate` (clamped to 1..16) and reset the state to \|0…0⟩ |
| 1 | READ | r | send the 2^n amplitudes, index 0 first |
| 2–8 | X, Y, H, P, RX, RY, RZ | g | gate on `target`, controlled by `control` if different |

A gate whose target or control is not below the current qubit count is dropped, and so is any
unused opcode. After reset the qubit count is 1 and the state memory is undefined, so a program
starts with SETQ.

## The pipeline and why it needs no stalls

```
 stage 1  QSS    couple counter -> indices i, j, write enables   (addresses the QSRF)
 stage 2  QSRF   synchronous read of c_i and c_j
 stage 3  QAU    operand selection (DCU) and 8 multiplications by sin/cos
 stage 4  QAU    4 additions, round to nearest even
 stage 5  QSRF   write c_i', c_j' back
```

Gate context travels down the pipeline with every couple: the DCU selection, sin and cos. The
last couples of one gate can therefore share the pipeline with the first couples of the next.
The control unit (QECU) fetches the next instruction as soon as the current gate starts. Its
angle then goes through the 3-cycle trigonometric unit while the current gate is still
running. A pre-loaded gate sequence therefore runs with no idle cycle:

```
cycles = sum over gates of  2^(max(n, 5) - 1)   (single-qubit)
                         or 2^(max(n, 5) - 2)   (controlled)
         + 4
```

This matches the published run-time formula `2^(max(Nq,Nq_min)-1) * Ng * (2-alpha)/2 +
(Npipe-1)` with `Npipe = 5` and `Nq_min = 5`. The testbenches check the count exactly.

Consecutive gates are data dependent: gate `g+1` may read a couple that gate `g` is still
computing. Two measures keep this safe without stall logic:

1. **Minimum gate length.** Circuits with fewer than `Nq_min = ceil(log2(5) + 2) = 5` qubits
   are enumerated as if they had 5. The padding couples, those with an index at or above
   `2^n`, go through the datapath, but their write enables are off. Every gate therefore lasts
   at least 8 cycles.
2. **Write-first state memory.** A read in the same cycle as a write to the same address
   returns the new value. A couple read in stage 2 is then written back in stage 5, three
   cycles later. The butterfly order (the counter `k` with a 0 inserted at the target bit, and
   a 1 inserted at the control bit) then never lets gate `g+1` read an index before gate `g`
   wrote it. An exhaustive check over all gate pairs up to 8 qubits confirmed this. The same
   check shows that a read-first memory (four cycles) would fail at 5 qubits.

## Blocks

| file | block | role |
|---|---|---|
| `amaretto_pkg.sv` | – | widths, opcodes, amplitude, instruction, DCU and TX-word types |
| `amaretto_qss.sv` | Quantum State Selector | butterfly couple enumeration, padding, controlled filter |
| `amaretto_qsrf.sv` | Quantum State Register File | 2^16 x 40-bit state memory, pumped at `clk2x`: 2 reads + 2 writes per cycle |
| `amaretto_tu.sv` | Trigonometric Unit | sin/cos of the angle, table plus Taylor correction |
| `amaretto_dcu.sv` | Datapath Control Unit | opcode → coefficient selection (table above) |
| `amaretto_qau.sv`, `amaretto_cu.sv` | Quantum Arithmetic Unit | 4 computing units, 2 multipliers + adder + rounding each |
| `amaretto_qecu.sv` | Quantum Emulator Control Unit | fetch/decode, SETQ initialisation, gate issue, READ streaming |
| `amaretto_emulator.sv` | emulator core | the five-stage pipeline above |
| `amaretto_async_fifo.sv` | RX / TX FIFO | dual-clock FIFOs, Gray pointers |
| `amaretto_ccu.sv` | communication control unit | instruction words into RX FIFO; amplitudes out as two beats |
| `amaretto_axis_if.sv`, `amaretto_axis_skid.sv` | communication interface | AXI4-Stream slave and master with register slices |
| `amaretto_top.sv` | top | all of the above; `aclk` and `clk` domains, plus `clk2x` for the memory |

### Trigonometric unit

The top two angle bits select the quadrant. The next 6 bits index a 64-entry quarter-wave
table of sin and cos, which is computed at elaboration with 24 fractional bits. The remaining
11 bits are an offset `d < 0.025` rad. The unit then applies a second-order Taylor step,
`sin(a+d) = S + C d - S d^2/2` and `cos(a+d) = C - S d - C d^2/2`, and swaps or negates for
the quadrant. The error is at most 1 LSB of Q2.18 over 4000 random angles. The values the
fixed gates need are exact: sin 0 = 0, cos 0 = 1, sin(pi/4) = cos(pi/4), sin(pi/2) = 1 and
cos(pi) = -1. The unit is fully pipelined, with a latency of 3 cycles.

### State memory

The whole state vector sits on chip: `2^16` amplitudes of 40 bits. Each emulator cycle the
pipeline reads one couple and writes one couple back, which is two reads and two writes. A block
RAM has too few ports for that at the emulator clock. The memory is therefore "pumped". Its one
write port and two read ports run on `clk2x`, a clock at twice `clk` with aligned rising edges,
so every `clk` cycle holds two `clk2x` edges:

```
clk2x edge      mid-cycle                 aligned with the next clk edge
write port      write a (c_i of stage 5)   write b (c_j of stage 5)
read ports      -                          read both (couple of stage 2)
```

A toggle flop on `clk`, compared with a copy sampled on `clk2x`, tells the two edges apart. From
`clk`'s point of view the memory behaves as a two-write, two-read RAM with one cycle of read
latency. Reads are write-first: a read sees write a of the same cycle in the array, and write b
through a bypass. The pipeline relies on this (see above). Write a is taken half a cycle after
its inputs change. That half-cycle path is the usual price of pumping and sets the `clk2x`
timing. `clk2x` must come from the same source as `clk`, for example a second output of the
FPGA's clock manager.

## External interface and clocking

`amaretto_top` has two clock domains: `aclk` for the AXI4-Stream side and `clk` for the
emulator. A third clock, `clk2x`, runs at twice `clk` and is aligned with it. It clocks only the
state memory. The published implementation runs at 100 MHz. `aclk` and `clk` may be unrelated. Each
domain has an asynchronous active-low reset, and both resets should be released together.

* `s_axis_*` (32-bit TDATA): one instruction per beat, TLAST ignored. TREADY drops while the
  16-entry RX FIFO is full.
* `m_axis_*` (32-bit TDATA): on READ, each amplitude leaves as two beats, first the real part,
  then the imaginary part, each sign-extended from 20 bits. TLAST marks the imaginary beat of
  the last amplitude. The emulator pauses while the TX FIFO is full.
* `emu_idle`: the emulator has no instruction pending and an empty pipeline.

A host DMA engine is expected on the two streams. It and the compiler are outside this RTL.

## What is specified and what is chosen

Taken from the publication:
* The block structure: QSRF, QSS, TU, QAU with DCU, QECU, RX/TX asynchronous FIFOs, the
  communication control unit and the AXI4-Stream interface unit.
* The 16-qubit, 20-bit (Q2.18) configuration with round-to-nearest-even.
* The 32-bit instruction with 5/4/4/19-bit fields and the s/g/r instruction types.
* A pumped state memory: one write port and two read ports at twice the emulator clock.
* The single-couple five-stage pipeline, `Nq_min` padding with unstored results, and the
  run-time formula.
* The shared `coefS·sin + coefC·cos` form with four two-multiplier units.
* A TU built from a table plus a Taylor series.

Chosen here, where the publication is silent:
* The field order (opcode in the top bits) and the opcode numbering.
* The gate list and its coefficient table. The publication names the gate sets but not the
  opcodes.
* The write-back of `c_i` is turned off for the phase gate.
* SETQ clears the state to |0…0⟩, and READ sends amplitudes in index order.
* The write-first state memory, and the split of the two writes over the two `clk2x` edges.
* The TU's table size, expansion order and internal precision. The publication cites a
  separate LUT+Taylor design without describing it.
* The counter order of the couples.
* The routing of instruction fields. The publication's block diagram draws the RX FIFO output
  straight to the TU, the QECU and the QSS. Here the QECU pops the word into a pending
  register, and the TU and the QSS take the angle and the qubit numbers from that register. The
  fields are the same; the register only holds them while the TU result is on its way.
* The TU rounds its result to Q2.18 with the same nearest-even rule as the arithmetic unit.
* A FIFO depth of 16, Gray-pointer FIFOs, register slices, and the two-beat output format.

One point in the publication reads two ways. The text asks for "at least `2^{Nq_min}`
couples" for small circuits, while its timing formula implies `2^{Nq_min-1}` (half that for
controlled gates). This design follows the formula.

## Verification

Every block has a self-checking testbench in `tb/`. Each one ends with a line
`TB_RESULT checks=N failures=M`. The emulator-level tests compare against `amaretto_ref_pkg`,
a double-precision state-vector model. That model applies each gate from its 2x2 matrix, not
from the DCU table.

| testbench | what it shows |
|---|---|
| `tb_amaretto_qss` | couples equal an independent enumeration, padding flags, back-to-back gates |
| `tb_amaretto_qsrf` | pumped two-read/two-write behaviour, write-first bypass, port-b priority, outputs steady across the mid-cycle edge |
| `tb_amaretto_tu` | ≤ 2 LSB error (1 observed), exact special angles, 3-cycle latency |
| `tb_amaretto_dcu` | every opcode's coefficients reproduce the gate matrix |
| `tb_amaretto_qau` | bit-exact round-to-nearest-even including ties, 2-cycle latency |
| `tb_amaretto_qecu` | SETQ clamp and initialisation, gate issue timing, drops, READ order under back-pressure |
| `tb_amaretto_emulator` | random circuits at 1–6 qubits, amplitudes to 1e-3, exact cycle counts |
| `tb_amaretto_async_fifo`, `tb_amaretto_ccu`, `tb_amaretto_axis_if` | order, flags, TLAST, throughput |
| `tb_amaretto_top` | end to end over AXI4-Stream with unrelated clocks; counts every mechanism |
| `tb_amaretto_top_sweep` | default top, random circuits at 1–16 qubits with `Ng·2^Nq` from 16 to 327 680: exact gate time and all amplitudes |
| `tb_amaretto_top_full` | default 16-qubit top: 21-gate circuit, all 65 536 amplitudes, exact gate time |

`tb_amaretto_top_full` takes a few seconds. Its GHZ-based circuit with rotations takes 425 988
emulator cycles of gate time, exactly as the formula predicts. Every amplitude is within 1e-3
of the reference.

`tb_amaretto_top_sweep` also takes a few seconds. It prints the gate time of each circuit next to
`Ng·2^Nq`. The largest point, 5 gates on 16 qubits (3 of them controlled), takes 114 692 cycles,
which is 1.15 ms at 100 MHz. That agrees with the roughly 1 ms gate-emulation time published for
the same circuit size. Time spent moving instructions and results over the stream is extra and
depends on the host.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/amaretto_pkg.sv tb/amaretto_ref_pkg.sv tb/tb_amaretto_top.sv \
    --top-module tb_amaretto_top
./obj_dir/Vtb_amaretto_top
```

Replace `tb_amaretto_top` with any testbench name. Lint a module with `verilator --lint-only
-Wall rtl/amaretto_pkg.sv rtl/<module>.sv -y rtl`. The testbenches drive inputs on the falling
clock edge and sample on the rising edge, so they run on any event-driven simulator.

## Size

Synthesis without an FPGA library gives the following for the 16-qubit top: 2 621 440 bits of
state memory, 3 200 bits of trigonometric tables, two small FIFOs, about 1 200 flip-flops and
14 multipliers (8 in the arithmetic unit, 6 in the trigonometric unit). The published
implementation reports 2.62 Mbit of block RAM, which matches the state memory, and 11 DSP
blocks. State memory grows as `40 * 2^n` bits, so each extra qubit doubles it. The qubit limit
is the parameter `NQ_MAX` of `amaretto_top`; the instruction's 4-bit qubit fields then need
widening beyond 16.
