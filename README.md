# A state-vector quantum circuit emulator in SystemVerilog

A quantum circuit on *n* qubits is fully described by its state vector. This
vector holds 2^n complex probability amplitudes, one per basis state
|0…0⟩ … |1…1⟩. This design keeps that whole vector in flip-flops on an FPGA.
It applies a compiled circuit to the vector one gate at a time. At the end it
streams the final amplitudes out to a microcontroller.

The main idea is that a one-qubit gate never needs the 2^n × 2^n layer matrix.
A gate on target qubit *t* splits the vector into 2^(n−1) disjoint **couples**
of amplitudes. Each couple holds two basis states that differ only in bit *t*.
The gate's 2×2 matrix acts on every couple independently. So the hardware
holds many identical small **datapaths**, each applying a 2×2 complex matrix to
one couple, and two multiplexer networks:

- a **selection unit** that routes each couple to its datapath;
- a **reordering unit** that routes the results back.

A controlled gate is the same one-qubit gate, applied only to couples whose
control qubit is 1. All other couples see an identity and keep their values.

The default configuration emulates **5 qubits** (32 amplitudes). It has
**16 datapaths**, so every gate processes all couples at once ("full
parallel"). Amplitudes are 20-bit fixed-point numbers. The cosine/sine table
holds **16 couples**. All of these are parameters.

## Selecting the couples

Couple number *j*, for 0 ≤ j < 2^(n−1), is built from two amplitudes:

- i0 = *j* with a 0 inserted at bit position *t*;
- i1 = i0 with bit *t* set.

For three qubits this gives:

| target t | couples (i0, i1) |
|---|---|
| 0 | (0,1) (2,3) (4,5) (6,7) |
| 1 | (0,2) (1,3) (4,6) (5,7) |
| 2 | (0,4) (1,5) (2,6) (3,7) |

The stride doubles with each target, as in the stages of an FFT butterfly.
`qpe_selection` builds both amplitudes of every couple with one *n*-way
multiplexer per datapath operand. The target qubit is the select input.

The reordering unit `qpe_reorder` does the inverse. For every register row *k*
it computes:

- the couple it belongs to: *k* with bit *t* removed;
- the datapath and window that processed that couple;
- which of the two results to take: *a* if bit *t* of *k* is 0, else *b*.

The control test is a mask. The decoder turns the control field into a one-hot
mask of the control qubit. When control equals target, which marks a one-qubit
gate, the mask is zero. Couple *j* takes part when `(i0 & mask) == mask`. The
datapath of a skipped couple still computes, but its result is not written, so
the row keeps its old value.

## Instruction word

One instruction encodes one gate. Fields, MSB first:

| field | width | default width | meaning |
|---|---|---|---|
| opcode | 4 | 4 | gate, see table below |
| target | ⌈log2 NQ⌉ | 3 | target qubit |
| control | ⌈log2 NQ⌉ | 3 | control qubit; equal to target for a one-qubit gate |
| immediate | Q | 4 | index of the cosine/sine couple (rotational gates) |

At the defaults an instruction is 14 bits. It travels in the low bits of a bus
word.

| gate | opcode | matrix | micro-steps |
|---|---|---|---|
| X | 0000 | [[0,1],[1,0]] | 2 |
| Y | 0001 | [[0,−i],[i,0]] | 2 |
| Z | 0010 | diag(1,−1) | 1 |
| H | 0011 | [[1,1],[1,−1]]/√2 | 3 |
| S | 0100 | diag(1,i) | 1 |
| S† | 0101 | diag(1,−i) | 1 |
| T | 0110 | diag(1,e^{iπ/4}) | 2 |
| T† | 0111 | diag(1,e^{−iπ/4}) | 2 |
| RX | 1000 | [[c,−is],[−is,c]] | 5 |
| RY | 1001 | [[c,−s],[s,c]] | 5 |
| RZ | 1010 | diag(c−is, c+is) | 5 |
| U1 | 1011 | diag(1, c+is) | 3 |

For the rotational gates (opcode MSB = 1), *c* and *s* come from the cosine/sine
register file at the address in the immediate field. The stored numbers must be
the ones the matrix uses directly:

- cos(θ/2) and sin(θ/2) for RX, RY and RZ;
- cos θ and sin θ for U1.

Angles are never computed in hardware. Opcodes 1100–1111 are unused and leave
the state unchanged. Any other gate must be rewritten into these twelve before
it reaches the emulator, for example CX = X with a control, or CZ = Z with a
control.

## The micro-coded datapath

This is the densest part of the design.

### Registers and timing

Each datapath (`qpe_datapath`) has four groups of registers:

- the input couple `a`, `b`, where *a* has the target bit 0 and *b* has it 1;
- two product registers, P1 and P2;
- the output couple `a'`, `b'`;
- two multipliers and two adders, which are the only arithmetic.

A gate runs as a short micro-program. In each cycle, one micro-word tells:

- each multiplier which operand to take (a.re, a.im, b.re, b.im) and which
  coefficient (1/√2, *c* or *s*);
- each adder which two operands to take (an input part or a product register),
  whether to add or subtract, and which output part to overwrite.

An adder reads the products of the previous cycle. So a product and the sum that
uses it are always one step apart, and a rotational gate is a pipeline of
multiply → add:

```
RY:  step 0  P1=a.re*c  P2=b.re*s
     step 1  P1=a.im*c  P2=b.im*s   a'.re = P1-P2 (from step 0)
     step 2  P1=b.re*c  P2=a.re*s   a'.im = P1-P2
     step 3  P1=b.im*c  P2=a.im*s   b'.re = P1+P2
     step 4                          b'.im = P1+P2
```

When a gate is loaded, the output registers also take the input couple. Gates
that leave *a* alone (Z, S, S†, T, T†, U1) therefore never touch it. Sign
flips and swaps (X, Y, Z, S, S†) need no multiplier at all.

### Control unit and timing

The micro-words live in two constant ROMs inside `qpe_dp_cu`:

- one ROM for the eight fixed gates;
- one ROM for the four rotational gates.

The opcode MSB picks the ROM. A table maps the opcode to the program's first
address. On `start` the unit issues consecutive words, one per cycle, until a
word with its `last` bit set. It pulses `done` one cycle later, when the output
registers hold the result.

Timing per window is **steps + 1** cycles from the start cycle to `done`, with
the step counts listed in the gate table. All datapaths of one window run the
same program and finish in the same cycle; an assertion in `qpe` checks this.

Each datapath normally has its own control unit. The sharing factor `S` lets one
control unit drive 2^S neighbouring datapaths instead. It trades the ROM and
sequencer copies for fan-out. S = 0 is the recommended setting.

## Number format

Every real number is 20-bit two's complement with 2 integer and 18 fractional
bits, so 1.0 = 262144 and 1/√2 = 185363. A product is computed to 40 bits,
then rounded to nearest by adding 2^17 and shifting right arithmetically by 18.
Ties go towards +∞. Sums are not saturated. Amplitudes stay inside [−1, 1],
and the integer bits leave room for the intermediate sum a + b.

The rounding error is about 2^−19 per product. Errors accumulate over the
gates of a circuit. The testbenches accept 4 LSB per single gate and 2–3·10^−4 absolute
on random circuits of up to 40 gates.

## Windowing: fewer datapaths, more time

With windowing order W, the core has ND = 2^(NQ−1−W) datapaths, and each gate
takes 2^W **windows**. Window *w* processes couples w·ND … w·ND + ND − 1. The
window counter steps through them. Each window writes only its own couples
back.

- W = 0 is the full-parallel machine.
- W = NQ−1 leaves one datapath, which handles one couple after another.

The state register file and the selection/reordering multiplexers keep their
size. Only the datapaths shrink. Windows of one gate run back to back without
pipelining, so every extra order doubles the gate time.

## Talking to the microcontroller

The FPGA is a slave of a microcontroller, called the MCU here. They share:

- a 28-bit data bus;
- two 2-bit handshake signals: `from_mcu`, driven by the MCU, and `to_mcu`,
  driven by the FPGA.

Bit 1 of each handshake signal marks the phase, meaning who transmits. Bit 0 is
a four-phase request/acknowledge. The bus itself is three ports: `bus_in`,
`bus_out` and `bus_oe`. The tri-state pad that joins them sits outside the RTL.

An emulation, run by `qep_control_unit`:

1. **Start.** `from_mcu[1]` rises. The state is reset to |0…0⟩ and all counters
   are cleared.
2. **Write phase.** `from_mcu[1]` is 1. For each word:
   1. The FPGA raises `to_mcu[0]` ("ready").
   2. The MCU drives the bus and raises `from_mcu[0]`.
   3. The FPGA samples the bus into a fetching register and drops `to_mcu[0]`.
   4. The MCU drops `from_mcu[0]`.

   The words come in this order:
   - the number of cosine/sine couples *m*;
   - the number of qubits in use *n*;
   - 2*m* values, sine then cosine of each couple, stored through the
     trigonometric counter;
   - any number of instructions.

   Each instruction is executed, all its windows, before "ready" rises again. So
   the MCU is throttled by the gate latency. One window takes steps + 2 cycles,
   counting its start cycle.
3. **Read phase.** `from_mcu[1]` falls. The FPGA raises `to_mcu[1]` and drives
   the bus. On each MCU request (`from_mcu[0]` high):
   1. It puts the next value on the bus, sign-extended to 28 bits.
   2. It raises `to_mcu[0]`.
   3. The MCU samples and drops its request.
   4. The FPGA drops `to_mcu[0]`.

   The values go real part, then imaginary part, basis states in increasing
   order: 2·2^n values in all. Afterwards `to_mcu` returns to 00.

`from_mcu` passes through a two-flop synchroniser. A value of *n* that is 0 or
larger than NQ means NQ; a value of *m* larger than 2^Q means 2^Q.

Measurement is not done in hardware. The full final state is returned, and
sampling, if wanted, happens in software.

## Block map

```
aequam_top
├── qep_control_unit     phases, double handshake, execution sequencing
├── qpe_counter ×3       trigonometric (load address), window, results (readout address)
├── qpe_bus_if           fetching registers (cos/sin; instructions + config), output register, bus_oe
└── qpe                  emulator core
    ├── qpe_decoder      instruction register, opcode/target/control mask/immediate
    ├── qpe_trig_unit    2^Q cosine/sine couples
    ├── qpe_state_rf     2^NQ complex amplitudes, all rows read/written in parallel
    ├── qpe_selection    butterfly couple selection + control test
    ├── qpe_dp_cu ×ND/2^S micro-ROM control units
    ├── qpe_datapath ×ND 2 multipliers + 2 adders per couple
    └── qpe_reorder      results back to their rows, gated by window and control test
aequam_pkg               number format, opcodes, micro-word type
```

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NQ` | 5 | qubits held (state register has 2^NQ rows) |
| `W` | 0 | windowing order; 2^(NQ−1−W) datapaths |
| `Q` | 4 | immediate width; 2^Q cosine/sine couples |
| `S` | 0 | one control unit per 2^S datapaths (S ≤ NQ−1−W) |
| `BUS_W` | 28 | data bus width (≥ 20 and ≥ instruction width) |

The word length (20 bits, 18 fractional) is fixed in `aequam_pkg`.

The default build is about 5,300 flip-flops, 1,280 of them the state vector.
The u-ROMs are constant tables. Area grows as 2^NQ for the register file and the
multiplexers, and as 2^(NQ−1−W) for the datapaths.

## Simulating

Every testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops by itself; a watchdog ends a hung
run. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
    rtl/aequam_pkg.sv tb/tb_aequam_top.sv --top-module tb_aequam_top
./obj_dir/Vtb_aequam_top
```

Swap in any other testbench name to run it.

| testbench | what it shows |
|---|---|
| `tb_aequam_top` | the default 5-qubit emulator driven through the bus by a behavioural MCU (`aequam_host_model`), running three circuits (see below); it counts every gate type, skipped couples, cosine/sine loads, phase changes, reads and window latency, and fails if any of them never happens |
| `tb_aequam_windowed` | the same flow with W = 2 and S = 2: 4 datapaths, 4 windows per gate, one shared control unit |
| `tb_aequam_workloads` | GHZ on a 3-qubit full-parallel build; on the default build, teleportation with deferred measurement (checked against the known result \|+⟩\|+⟩\|ψ⟩) and a 3-qubit quantum neural network with 12 distinct angles (ZZ feature map plus RY ansatz); a random 6-qubit circuit on a fully serial build (NQ = 6, W = 5: one datapath, 32 windows per gate) |
| `tb_qpe` | the core at W = 0 and at W = 2/S = 1; random circuits checked amplitude by amplitude after every gate |
| `tb_qpe_datapath` | every gate on random couples against the matrix, with latency = steps + 1 |
| `tb_qpe_dp_cu` | ROM structure, plus an interpreter of the micro-programs checked against the gate matrices |
| `tb_qpe_selection`, `tb_qpe_reorder` | couple mapping for all targets, masks and windows |
| `tb_qep_control_unit` | handshake, word order, counter limits, readout order |
| others | decoder, trig unit, state register file, counters, bus interface |

The three circuits in `tb_aequam_top` are:

- a 3-qubit GHZ state, (|000⟩ + |111⟩)/√2;
- the 3-qubit example X q0, H q1, CZ(q0→q1), CX(q0→q2), Y q2, which ends in
  (−i|001⟩ + i|011⟩)/√2;
- a random 40-gate 5-qubit circuit over all twelve gates, half of them
  controlled, with rotation angles drawn at random.

The host model also holds a floating-point reference simulator, so any circuit
written with its `run_circuit` task is checked automatically.

## Where this RTL departs from the original design, and what it leaves out

- **Datapath internals and the micro-code are this design's own.** Only the
  resource budget is given: two multipliers and two adders with data
  dependencies between them, plus two u-ROMs selected by the opcode MSB. The
  operand routing, the micro-word format, the ROM contents and the resulting
  cycle counts were worked out here.
- **Handshake edge order and word order.** The split of the handshake signals
  into a phase bit and a request/acknowledge bit is the original's. The exact
  four-phase sequence is this design's choice. So are the order of the
  configuration words and the sine-before-cosine order.
- **Bus width.** The board connects MCU and FPGA with 32 lines. Here 28 of them
  carry data and 2 + 2 carry the handshake, matching the 28-bit bus shown in
  the timing diagram of the original.
- **Skipped couples** are computed but not written. The original skips them
  altogether. The result is the same, and the datapath time would be spent in
  any case because all datapaths run in lockstep.
- **No pipelining** between windows. The original names a pipelined datapath as
  future work only.
- **Qubits in use.** The number of qubits in use only shortens the readout. Gates
  always run over the full 2^NQ vector, which is correct because the unused
  qubits stay |0⟩.
- **Not in the RTL:**
  - the tri-state pad, which is brought out as `bus_out`/`bus_oe`;
  - the microcontroller and its USB firmware;
  - the host-side compiler (OpenQASM to instructions, gate equivalences,
    cosine/sine table);
  - the fixed-point software models;
  - the generator that produced the original hardware description.

  The behavioural MCU in `tb/aequam_host_model.sv` stands in for the
  microcontroller in simulation.
- **Sizes.** Circuits of up to five qubits fit the default build. Larger ones
  need `NQ` raised, and `W` raised with it to keep the datapath count down. A
  circuit with more than 2^Q distinct rotation angles needs a larger `Q`.
