# FQsun in SystemVerilog: a wave-function quantum-circuit emulator

An n-qubit state is a vector of 2^n complex amplitudes. A gate on one qubit
(or on a control/target pair) mixes the amplitudes in pairs: every index i
is paired with the index that differs from it only in the target qubit's
bit. Doing that is cheap. Building the full 2^n x 2^n matrix is not. FQsun
is a hardware emulator built on this observation.

- The state vector lives in on-chip RAM.
- The circuit lives in a small instruction memory, one word per gate.
- One arithmetic unit, the Quantum Gate Unit (QGU), applies each gate by
  sweeping once over all 2^n amplitudes.

This repository is a synthesizable SystemVerilog model of the fixed-point
32-bit version (FX32). It has the same storage sizes as the FPGA build it
is modelled on:

- 2048 gate instructions;
- 2^17 amplitudes, i.e. up to 17 qubits;
- two amplitude memories of 1 MB each.

A host processor reaches the design over an AXI4-Lite slave port.

## 1. The update rule: scatter into a cleared vector

The usual way to apply a 2x2 gate U to a pair (a0, a1) is to read both,
compute both new values and write both back. FQsun does it differently. It
keeps two vectors:

- `old`: the state before the gate;
- `new`: all zeros at the start of the gate.

It then visits every index i exactly once and scatters the contribution of
`old[i]` into `new`. Let s be the target-qubit bit of i and p the partner
index:

    p      = i + cut   if s = 0        cut = 2^(n-1-w)
           = i - cut   if s = 1        (w = target qubit number)

    new[i] += U[s][s]   * old[i]       the diagonal entry
    new[p] += U[1-s][s] * old[i]       the off-diagonal entry

After the sweep, `new = U·old`. Each step needs three operands:

- x = old[i];
- y = new[i], which may already hold the partner's contribution;
- z = new[p].

Each step produces two results, y' and z'.

The two vectors swap roles after every gate. The vector that was read
becomes the next gate's `new`, so it must be zero. The design therefore
writes 0 over `old[i]` in the same cycle that it writes y' and z'. That is
why there are two memories, called **Ping** and **Pong**, and why the
circuit result ends up in a memory that depends on the gate count m:

- Ping holds the initial state.
- Gate 0 writes Pong, gate 1 writes Ping, and so on.
- After m gates the result is in **Pong if m is odd** and in Ping if m is
  even.

**Qubit numbering.** Qubit w is bit n-1-w of the index, so qubit 0 is the
most significant bit.

**CX gates.** For a controlled-NOT with control c and target t:

- cut comes from the target;
- an amplitude with the control bit (bit n-1-c of i) set moves to its
  partner: `new[p] += old[i]`;
- any other amplitude stays where it is: `new[i] += old[i]`.

## 2. Gate arithmetic (QGU)

The QGU gets x, y, z, the state bit s, the control bit and the context
values `sin(theta/2)`, `cos(theta/2)`. It has five gate units working in
parallel on the same operands. A multiplexer driven by the opcode picks the
one result pair that is used. With c = cos(theta/2), s' = sin(theta/2) and
m = x/sqrt(2):

| opcode | gate | y' (new[i]) | z' (new[p]) | multipliers | cycles/amplitude |
|---|---|---|---|---|---|
| 0 | H  | y + m (s=0), y - m (s=1) | z + m | 2 | 4 |
| 1 | S  | y + x (s=0), y + i·x (s=1) | z | 0 | 2 |
| 2 | CX | y + x (control 0), y (control 1) | z (control 0), z + x (control 1) | 0 | 2 |
| 3 | Rx | y + c·x | z - i·s'·x | 4 (shared with Ry) | 4 |
| 4 | Ry | y + c·x | z + s'·x (s=0), z - s'·x (s=1) | (shared) | 4 |
| 5 | Rz | y + (c - i s')·x (s=0), y + (c + i s')·x (s=1) | z | 4 | 4 |

The matrices are the textbook ones:

- Rx = [[c, -is'], [-is', c]]
- Ry = [[c, -s'], [s', c]]
- Rz = diag(e^{-iθ/2}, e^{iθ/2})
- S = diag(1, i)

T, X, Y and Z have no hardware of their own. Software issues them as
Rz(π/4), Rx(π), Ry(π) and Rz(π), which equal the named gates up to a global
phase. Controlled phase and SWAP gates are also built in software:

- CP(φ) = Rz_c(φ/2) · Rz_t(φ/2) · CX · Rz_t(-φ/2) · CX
- SWAP = three CX

**Number format.** Every real or imaginary part is a W-bit two's-complement
number with one sign bit, one integer bit and W-2 fraction bits, Q1.30 for
W = 32. The multipliers (`fx_mul`) have two pipeline stages:

- the first stage registers the full product;
- the second registers it shifted right by W-2 bits, truncated toward
  minus infinity.

The adders after the multipliers are combinational. 1/sqrt(2) is a
constant rounded to W-2 fraction bits. Amplitudes stay inside [-1, 1], so
nothing saturates.

**Timing.** The QGU holds no state between amplitudes. The caller keeps the
operands stable:

- S and CX: y'/z' are valid in the same cycle;
- H, Rx, Ry and Rz: y'/z' are valid two cycles later.

`fqsun_pkg::gate_latency()` and `fqsun_pkg::cycles_per_amp()` give these
numbers.

## 3. The controller and the per-amplitude schedule

`fqsun_ctrl` runs a session:

    IDLE --start--> FETCH (read context[pc]) --> DECODE
      DECODE --> READ (i = 0) --> WAIT (latency cycles) --> WRITE --> READ (i+1) ...
      after WRITE of i = 2^n - 1: flip sel, pc += 1, then FETCH, or DONE if pc = m

The steps for each amplitude are:

- **READ** issues three reads in one cycle:
  - x = src[i] on port A of the source memory;
  - y = dst[i] on port A of the destination;
  - z = dst[p] on port B of the destination.
- **WAIT** lasts `gate_latency(gate)` cycles.
- **WRITE** issues three writes in one cycle: y' to dst[i], z' to dst[p]
  and 0 to src[i].

Amplitudes are not overlapped. Index i+1 may be the partner that was just
written, and this design keeps the read-after-write order simple rather
than forwarding.

Costs:

- one amplitude: 2 + latency cycles, which is 4 for H/Rx/Ry/Rz and 2 for
  S/CX;
- one gate: 2 + 2^n x (cycles per amplitude) cycles;
- one 17-qubit Hadamard: 524,290 cycles.

The router between the memories and their users, `io_arbiter`, works as
follows:

- While the controller is idle, the host owns port A of whichever memory
  it addresses.
- During a session, the controller owns both ports of both memories:
  - `sel = 0`: source = Ping.A, destination = Pong.A and Pong.B;
  - `sel = 1`: the roles are swapped.

`start` is ignored while `load` is high. `stop` aborts a session and sets
the program counter and `sel` back to 0. A gate count of 0 completes at
once.

## 4. Host interface

AXI4-Lite, 32-bit data, 23-bit byte addresses. Bits [22:21] select a
region:

| region | contents | layout |
|---|---|---|
| 0 | control registers | word offset addr[4:2] |
| 1 | context memory (write only) | entry addr[14:4], field addr[3:2] |
| 2 | Ping | amplitude addr[19:3], addr[2] = 0 real part, 1 imaginary part |
| 3 | Pong | as Ping |

Control registers:

| offset | name | bits |
|---|---|---|
| 0x00 | CTRL | bit0 load (level), bit1 start (pulse), bit2 stop (pulse) |
| 0x04 | NQUBITS | 5-bit n, at most 17 |
| 0x08 | NGATES | gate count m, at most 2048 |
| 0x0C | STATUS | bit0 done, bit1 busy, bit2 result in Pong |
| 0x10 | PC | gate being executed |

A context entry is four 32-bit fields:

| field | contents |
|---|---|
| 0 | {w1[12:8], w0[7:3], opcode[2:0]} |
| 1 | cut = 2^(n-1-target), where target = w0, or w1 for CX |
| 2 | sin(θ/2) in Q1.(W-2) |
| 3 | cos(θ/2) in Q1.(W-2) |

For CX, w0 is the control and w1 the target. The software computes cut and
the sine/cosine.

**Running a circuit.**

1. Set load.
2. Write NQUBITS, NGATES and the context entries.
3. Write the initial state into Ping and **zeros into Pong**. The first
   gate accumulates into Pong.
4. Clear load and write start.
5. Poll STATUS.done, or wait on the `done` pin.
6. Read the result from the memory that STATUS bit 2 names.

`done` stays set until the next start or stop. Context and amplitude
accesses during a session are dropped and answered with SLVERR. WSTRB is
ignored.

**Errors the hardware does not check.** The host must keep the qubit
numbers w below n and keep cut consistent with them. Only n ≤ 17 is
asserted, in simulation.

## 5. Blocks and files

| file | block |
|---|---|
| `rtl/fqsun_pkg.sv` | opcodes, multiplier latency, cycles per amplitude, 1/sqrt(2) |
| `rtl/fqsun_top.sv` | top: wires everything below to the AXI port |
| `rtl/axi_mapper.sv` | AXI4-Lite slave and address decode |
| `rtl/ctrl_buffers.sv` | control/status registers |
| `rtl/ctx_mem.sv` | context memory, 2048 x {w1, w0, cut, sin, cos, opcode} |
| `rtl/amp_mem.sv` | dual-port amplitude RAM (instantiated as Ping and Pong) |
| `rtl/io_arbiter.sv` | host/controller routing and Ping/Pong role swap |
| `rtl/fqsun_ctrl.sv` | program counter, amplitude loop, schedule |
| `rtl/qgu.sv` | QGU: five gate units and the output multiplexer |
| `rtl/qgu_h.sv`, `qgu_s.sv`, `qgu_cx.sv`, `qgu_rxy.sv`, `qgu_rz.sv` | gate units |
| `rtl/fx_mul.sv` | two-stage fixed-point multiplier |

Top-level parameters:

| parameter | default | meaning |
|---|---|---|
| `W` | 32 | bits per real/imaginary part |
| `AW` | 17 | log2 of the amplitude memory depth, i.e. the maximum qubit count |
| `CTX_DEPTH` | 2048 | gates per program |
| `ADDR_W` | 23 | AXI address width |

The fixed-point datapath is generic in W:

- W = 16 with AW = 18 gives the 16-bit fixed-point variant, which holds 18
  qubits in the same RAM size;
- W = 24 gives the 24-bit one.

These variants are not verified here: the arithmetic tests all run at
W = 32. The floating-point variants (FP16/FP32) are not provided.

Synthesis infers three RAMs:

- context: 2048 x 94 bits;
- Ping and Pong: 2^17 x 64 bits each.

About 17 Mbit in total.

## 6. Where this model departs from, or chooses between, its source

- **Gate update direction.** In the original pseudo-code the off-diagonal
  contribution for state 0 uses the upper-right matrix entry. That applies
  the transpose of U, which is wrong for Ry. This model uses the
  lower-left entry (the correct U·ψ) and checks it against a reference.
- **Adder pipelining.** The source says once that fixed-point addition
  needs no pipeline stage, and once that it needs one. The model has none.
  That reproduces the published cycle counts: H/Rx/Ry/Rz 4 cycles per
  amplitude, S/CX 2.
- **Context depth.** The context memory is described as 2048 entries
  (16 KB), but drawn as 2^12. The model uses 2048.
- **cut width.** The cut field is described as 5 bits but drawn as 17~18
  bits. A 5-bit field cannot hold 2^16, so the model uses 17 bits.
- **Memory depth per precision.** The memory-depth sentence pairs 2^17
  with 16-bit and 2^18 with 32-bit precision. The results tables give 18
  qubits to the 16-bit versions and 17 to the 32-bit ones. The model
  follows the tables.
- **Parameter-shift factor.** The parameter-shift formula is printed with
  a factor 1/sqrt(2). The exact two-term rule for these rotations uses
  1/2, and the PSR testbench uses 1/2.
- **QFT gate count.** The QFT gate-count table lists (n+3)(n-1) CX gates,
  which gives 745 gates at 17 qubits. The comparison table gives 721. The
  decomposition above (n H, n(n-1) + 3·floor(n/2) CX, 1.5·n(n-1) Rz)
  gives 721.
- **This design's own choices.** None of the following is specified in
  the source:
  - the gate-count register;
  - the AXI4-Lite map and its SLVERR rule;
  - the opcode values;
  - per-half write enables on the amplitude RAM;
  - truncation in the multiplier;
  - the 2-cycle context fetch per gate;
  - the rule that the host clears Pong before the first gate.

## 7. Verification

Every testbench is self-checking. Each ends with
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_qgu` | random operands for every gate and state against an exact integer model; latency per gate |
| `tb_amp_mem`, `tb_ctx_mem`, `tb_ctrl_buffers`, `tb_io_arbiter`, `tb_axi_mapper` | read/write behaviour, routing, register map, AXI handshakes with random bus delays, SLVERR |
| `tb_fqsun_ctrl` | every memory access of a session against a model of the schedule; cycles per gate; stop; load blocking start |
| `tb_fqsun_top` | end-to-end at 5 qubits over AXI (see below) |
| `tb_fqsun_full` | all parameters at their defaults: 17 qubits, a 17-gate program cycling through all six gate types, random initial state |
| `tb_wl_qft` | QFT on \|0> for 3..12 qubits |
| `tb_wl_qft17` | QFT on \|0> at 17 qubits, 721 gates |
| `tb_wl_rqc` | random Clifford+R circuits of depth 10, 3..11 qubits |
| `tb_wl_psr` | ZXZ layer, parameter-shift gradient for 3..5 qubits |

`tb_fqsun_top` counts every mechanism and fails if one never happens:

- each of the six gates;
- results in Ping and in Pong;
- stop during a session;
- start blocked by load;
- SLVERR during a session;
- done polling;
- per-session cycle counts.

The full-size, QFT, RQC and PSR testbenches do the following:

- check every amplitude against a double-precision model (error below
  1e-6);
- check the run time against the cycle formula of section 3;
- check the memory that holds the result.

On top of that:

- The QFT testbenches check that the result is the equal superposition.
- The PSR testbench checks these against a double-precision model:
  - C(θ) = Σ_j j·|α_j|²;
  - every shifted evaluation;
  - every gradient component, against a finite difference.

  It also checks that one gradient step lowers the cost measured on the
  emulator.

Measured results:

- The 17-qubit QFT (721 gates) takes 300,418,466 clock cycles. That is
  2.40 s at 125 MHz.
- All amplitudes are within 1e-6 of the double-precision result.
- With Verilator, that testbench takes about six minutes. The other
  system-level tests take seconds.

Each block testbench was also run against a copy of its block with one
deliberate bug, and it reported failures every time, for example:

- the Ry/Rx select swapped in the QGU;
- the source not being cleared in the arbiter;
- a wrong partner index in the controller;
- real and imaginary parts swapped at the top.

## 8. Simulating

Verilator 5 with timing support. For example, for the QFT test:

    verilator --binary --timing --assert -Wno-fatal -j 4 --timescale 1ns/1ps \
      --top-module tb_wl_qft -y rtl -y tb +libext+.sv -Irtl -Itb \
      rtl/fqsun_pkg.sv tb/fqsun_host.sv tb/fqsun_circuits.sv tb/tb_wl_qft.sv
    ./obj_dir/Vtb_wl_qft

Testbench helpers:

- `tb/axi_lite_master.sv`: bus master tasks;
- `tb/fqsun_host.sv`: gate records, fixed-point conversion and the
  double-precision reference;
- `tb/fqsun_circuits.sv`: QFT, RQC and ZXZ generators;
- `tb/fqsun_harness.sv`: a default-size top with host tasks
  `load_program`, `load_state`, `run` and `read_state`.

A new circuit test is a few lines on top of the harness. Block testbenches
need only `rtl/fqsun_pkg.sv` plus the block's files.

## 9. Not included

- The floating-point datapaths (FP16, FP32: two-stage multipliers and
  two-stage adders, 6/4/4/6/6/8 cycles per amplitude).
- Everything outside the programmable logic: the processor, DMA, DDR and
  the software stack that builds context words. The testbench host tasks
  stand in for them.
- Overlapping consecutive amplitudes in the pipeline. The published cycle
  counts need no overlap, so the model has none.
