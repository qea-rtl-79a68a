# QEA: a state-vector quantum circuit simulator in SystemVerilog

A quantum circuit on *n* qubits acts on a state vector of 2^n complex
amplitudes. A gate on one qubit does not need a 2^n x 2^n matrix. It changes
amplitudes in pairs: the pair whose indices differ only in that qubit's bit
gets multiplied by the gate's 2x2 matrix. A CNOT (CX) gate only moves
amplitudes around. This core applies a circuit gate by gate, directly to a
state vector held in on-chip memory, and overwrites the vector in place. It
uses three ideas:

* **Memory.** The state vector is split over four processing elements (PEs),
  a quarter each. Each PE has its own copy of the gate matrices. A 2x2 matrix
  is stored as four complex numbers; no indices are stored, because the pair
  addresses follow from the qubit number. There is no second buffer for the
  next state.
* **Open PEs.** When a pair straddles two PEs, each PE reads its own half and
  sees its partner's read data on a shared bus. No data is copied between
  memories.
* **Flexible ALU and CX swapper.** Each PE's ALU has two units that compute
  either `a*x + b*y` (dense gates: H, Rx, Ry) or `a*x` (diagonal "sparse"
  gates: S, Rz). CX gates bypass the ALU entirely: a separate unit swaps
  amplitudes.

The supported gate set is {H, S, Rx, Ry, Rz, CX}, which is universal. Any
single-qubit gate can be loaded, because the core just multiplies by whatever
2x2 matrix it is given. Controlled rotations and controlled phases have to be
decomposed into this set before they reach the core. With the default
parameters the core holds circuits of 3 to 17 qubits and up to 2048 gates.

The architecture follows the QEA accelerator published by Tran, Vu, Le, Pham
and Nakashima (NAIST) for an AMD Alveo U280 card. This RTL is an independent
implementation built from that description. Where the description stops, it
makes its own choices; the section "Departures and own choices" lists them.

## Number format

Every real number is signed fixed point Q2.30: 32 bits, of which 2 are integer
bits (including the sign) and 30 are fractional. The range is [-2, 2) and the
step is 2^-30 ≈ 9.3e-10. A complex number `cplx_t` is `{im, re}` in 64 bits.
A complex product forms four 64-bit products, adds them in pairs at full
precision and then shifts right by 30 bits, which truncates. Sums wrap on
overflow. A normalised state never exceeds magnitude 1. A unitary 2x2 update
cannot push a component past 1 either, so overflow does not happen in normal
use.

## Where each amplitude lives

Qubit numbering follows the usual "qubit 0 is the most significant index bit"
convention. A gate on qubit *j* of an *n*-qubit circuit pairs index *i* with
*i + 2^b*, where **b = n-1-j**.

Amplitude *i* is stored in **PE i[1:0]** at **local address i >> 2**, so the
distribution is interleaved. This choice has two consequences:

* One 256-bit host bus word holds four consecutive amplitudes, one for each PE,
  so loading or reading back the state is one word per clock.
* For b ≥ 2 both members of a pair sit in the same PE. Their local addresses
  differ in bit b-2. For b = 0 or 1, which are the two last qubits, the partner
  sits in PE *p xor 2^b* at the same local address.

This determines the three ways a PE processes a gate (`pe_op_e`):

| mode | when | what one issue does (two words, ports A and B) |
|---|---|---|
| `OP_DENSE_LOCAL` | dense gate, b ≥ 2 | read pair x (bit b-2 = 0) and y; SU0 writes x' = u00·x + u01·y, SU1 writes y' = u10·x + u11·y |
| `OP_DENSE_CROSS` | dense gate, b < 2 | read own words at 2t, 2t+1; the partner PE reads the same addresses in the same clock, and its read data arrives over the shared bus. The "lower" PE (its bit b is 0) computes u00·own + u01·partner; the other computes u10·partner + u11·own. Each PE writes only its own words |
| `OP_SPARSE` | diagonal gate | read words at 2t, 2t+1; each is multiplied by u00 or u11, depending on bit b of its global index |

All four PEs start in the same clock and follow the same address sequence, so
in the cross-PE mode a partner's data is on the bus exactly when it is needed.

## Pipeline and gate time

Each PE's State Memory is a true dual-port RAM with one clock of read latency.
The PE issues a read of two words every second clock. The results come back
three clocks later (one for memory, one for multiply, one for add) and are
written over the same two addresses. Reads therefore fall on even clocks and
writes on odd clocks, so they never compete for a port. Before the first read,
the gate's 2x2 matrix is fetched once from the PE's Gate Memory into the
registers Val0..Val3.

| operation | clocks (n qubits) | at n = 17 |
|---|---|---|
| sparse or dense gate | 2^(n-2) + 5 | 32 773 |
| CX gate (two clocks per swapped pair) | 2^(n-1) | 65 536 |
| controller overhead per gate | 4 | |

At n = 17 and 250 MHz (the clock rate reported for the FPGA build), a
single-qubit gate takes 131 µs. The 721-gate QFT on 17 qubits takes 33 330 068
clocks from the start write to done, which is 0.133 s. The published FPGA
figure for that circuit is 0.329 s. The two numbers need not agree, because
the original's internal schedule is not known.

In this design, sparse and dense gates take the same time. Every amplitude has
to be read once and written once, and the two RAM ports allow one amplitude per
clock per PE. A dense gate reads each pair only once, so it already runs at
that limit. The original says sparse gates run in about half the time of dense
ones. That fits a datapath that reads two amplitudes for every dense output.
Here, dense gates run as fast as sparse ones instead.

## The CX swapper

CX(control c, target t) swaps psi[i] and psi[i xor 2^tb] for every i whose
control bit cb is 1 and whose target bit tb is 0. Here cb = n-1-c and
tb = n-1-t. The swapper counts s from 0 to 2^(n-2)-1 and inserts the fixed
bits (1 at cb, 0 at tb) into it to form i. For each pair it uses two clocks on
the CX bus:

1. Read i on `CX_addr0` and its partner on `CX_addr1`.
2. Write the two amplitudes back exchanged.

The PE array sends each bus address to the PE its low two bits select:
`CX_addr0` goes to port A of that PE and `CX_addr1` to port B. This works
whether the two amplitudes share a PE or not.

## Host interface

The core has one AXI4 slave port with 256-bit data. It accepts single-beat
transfers only, with no bursts and all byte lanes written. Address bits 27:24
select a region and bits 23:5 a word:

| region | word | write | read |
|---|---|---|---|
| 0 control | 0 | `[4:0]` n, `[47:32]` gate count, `[64]` start | `[0]` done, `[1]` busy, `[47:32]` gate count, `[79:64]` / `[111:96]` / `[143:128]` sparse / dense / CX gates executed |
| 1 gate context | gate number | `[1:0]` type (0 sparse, 1 dense, 2 CX), `[6:2]` target qubit, `[11:7]` control qubit | – |
| 2 gate matrix | gate number | `{u11, u10, u01, u00}`, 64 bits each | same word |
| 3 state | w | amplitudes 4w..4w+3, amplitude 4w+k in bits 64k+63:64k | same |

A gate's matrix and its context share the same gate number; CX gates have no
matrix. To run a circuit:

1. Write the initial state (2^(n-2) words).
2. Write a matrix for every gate that is not a CX, and a context for every gate.
3. Write the control word with the start bit set.
4. Wait for the `done` output, or poll the status word.
5. Read the state back.

The host should not touch the state or the matrices while `busy` is set.
`done` stays high until the next start. n must be between 3 and NQ_MAX, and
the target and control of a gate must differ and be less than n. The core does
not check any of this.

Write timing: AW and W are taken together. B follows one clock later and is
held until bready. Read timing: R arrives 2 clocks after AR for the control region, 3
clocks after AR for the matrix region and 4 clocks after AR for the state
region. It is held until rready.

## Blocks

```
qea_top
├── axi_mapper            AXI slave, address decode, control/status register
├── gate_context_memory   global gate list (type, target, control)
├── qea_controller        fetch gate, start PE array or CX swapper, wait, repeat
├── matrix_coordinator    registered broadcast of a matrix word to all Gate Memories
├── state_coordinator     splits/gathers state words over the four PEs
├── cx_swapper            CX gates as amplitude swaps over the CX bus
└── pe_array              four PEs, partner routing, CX bus decode
    └── pe  (x4)
        ├── pe_controller     gate-value load, address sequence, write-back timing
        ├── data_coordinator  State Memory port arbitration (compute > CX > host)
        ├── state_memory      2^NQ_MAX / 4 amplitudes, true dual port
        ├── gate_memory       GATE_DEPTH x 256-bit matrices
        ├── input_selector    ALU operand routing for the three modes
        └── alu               two special_units (comp_mul x2 + comp_add each)
```

Shared types and constants live in `qea_pkg`. The parameters are:

* `NQ_MAX` (17): the largest circuit. The State Memory of each PE has
  2^(NQ_MAX-2) words.
* `GATE_DEPTH` (2048): the number of gates a circuit can hold.
* `ADDR_W` (32): the AXI address width.

The full-size core holds 8 Mbit of state memory and 2 Mbit of gate memories.

## Departures and own choices

Taken from the original description:

* the block structure: AXI mapper, controller, matrix and state coordinators,
  CX swapper, four PEs, and inside each PE a data coordinator, state and gate
  memories, Val0..Val3, an input selector, an ALU of two SUs, and a PE controller
* Q2.30 arithmetic, the 256-bit bus, 17 qubits
* the in-place update and per-PE gate memories
* sharing of read data between PEs
* CX done by swapping

Own choices and corrections:

* **Pair update instead of the per-index loop.** The original pseudo-code
  updates psi[i] in place and later reads psi[i-g], which by then is already
  overwritten. This RTL reads both members of a pair before writing either.
* **CX visits each pair once.** The original CX pseudo-code swaps for every
  index with the control bit set. That would swap each pair twice and undo
  the gate. This RTL visits only the indices whose target bit is 0.
* **Sparse-mode SU.** In sparse mode the second multiplier receives (0, 1),
  so its product is zero. The published drawing shows multiplexers and a
  constant 1 there, but not what all their inputs are.
* **Choices the original leaves open.** The interleaved amplitude
  distribution, the partner rule, the two-clock issue schedule, the memory
  port arbitration, the gate-context encoding, the address map, and the
  single-beat AXI subset are all choices of this design.
* **Memory depths.** GATE_DEPTH = 2048 is a choice. The 721-gate 17-qubit QFT
  needs 721 slots; a power of two that holds it is at least 1024.
* **CX is its own gate type.** The original's gate classes list CX among the
  dense gates. Its hardware, though, sends CX to the swapper, and so does
  this design (type 2 in the gate context).
* **Controlled phase with five gates.** The original's drawing of CP(t) shows
  Rz(t/2), CX, Rz(-t/2), CX on the target. That equals CP(t) only up to a
  phase that depends on the control qubit. The testbenches add Rz(t/2) on the
  control as well. With five gates per CP, the 17-qubit QFT has exactly the
  721 gates the original reports.
* **Sparse gates are not faster**, because dense gates are already as fast
  (see above).
* **Only the accelerator is built.** The host CPU, DMA engine, DDR memory, AXI
  interconnect and the host software library are not part of this RTL. The
  library builds the circuit and generates the gate contexts and matrices; in
  the testbenches, the testbench plays its role.

## Verification

Each module has a self-checking testbench in `tb/` named `<module>_tb`. Each
testbench ends by printing `TB_RESULT checks=N failures=M`. `tb/tb_pkg.sv`
holds the reference model: a floating-point state-vector simulator plus
conversions between real numbers and Q2.30.

* **Arithmetic units.** The units are checked against real arithmetic with
  their exact latencies.
* **`pe_controller_tb`.** This test proves three things:
  * every local address is read once and written once, exactly 3 clocks after
    its read;
  * the pair structure and diagonal selects match the global index;
  * the gate time is 2^(n-2)+5 clocks, for every qubit of 3- to 8-qubit
    circuits.
* **`pe_tb`, `pe_array_tb` and `cx_swapper_tb`.** These run real gates on
  random states and compare with the reference. `pe_array_tb` covers the
  cross-PE pairs.
* **`qea_top_tb`.** This test drives the core through AXI with random
  back-pressure, with NQ_MAX = 8. It runs:
  * the QFT for 3 to 8 qubits, decomposed the way the evaluated circuits were:
    each controlled phase becomes 5 gates (Rz on control, Rz, CX, Rz, CX), and
    each swap becomes 3 CX;
  * random circuits over the whole gate set;
  * a 3-qubit W-state circuit. Its controlled-H becomes Ry(pi/4), CX,
    Ry(-pi/4) and its X becomes H S S H. The result must put probability 1/3
    on each of |001>, |010> and |100>.

  It checks:
  * the final state against the reference (largest error seen: 2e-8);
  * that the QFT of |0..0> is uniform;
  * the status counters;
  * the exact cycle budget.

  It counts every mechanism: sparse gates, dense gates within a PE and across
  PEs, CX within and across PEs, circuits smaller than the maximum, and AXI
  stalls. Each mechanism must occur at least once.
* **`qea_templates_tb`.** This test runs a set of 19 parameterised circuit
  templates (#1 to #19), one layer each, at 4, 7 and 13 qubits, with
  NQ_MAX = 13. A template is built from two kinds of layer:
  * rotation layers: Rx, Ry, Rz or H on every qubit;
  * entangling layers of CX, CZ, CRx or CRz: a chain, a ring, all-to-all, or
    alternating pairs.

  Controlled gates are rewritten into the core's gate set:
  * CRz(t) = Rz(t/2), CX, Rz(-t/2), CX on the target;
  * CRx(t) = H, CRz(t), H;
  * CZ = H, CX, H.

  The largest circuit is 520 gates. The largest error seen is about 1e-6. This
  test reconstructs the widely used "expressibility" template family; it is
  not a copy of a published gate list.
* **`qea_top_full_tb`.** This test runs the core at its default parameters on
  the 17-qubit, 721-gate QFT (33.3 M clocks). It compares all 131 072
  amplitudes with the reference (largest error 5.7e-9). It takes about two
  minutes in Verilator.

To run a testbench with plain Verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module qea_top_tb \
    -y rtl -y tb +libext+.sv rtl/qea_pkg.sv tb/tb_pkg.sv tb/qea_top_tb.sv
./obj_dir/Vqea_top_tb
```

Replace `qea_top_tb` with any other testbench name. For a lint pass, run
`verilator --lint-only -Wall rtl/qea_pkg.sv rtl/*.sv --top-module qea_top`.
The assertions in the RTL check three rules:

* no port writes one word twice in a clock;
* a PE never reads and writes in the same clock;
* AXI responses stay valid until taken.

## Trust and limits

* The arithmetic and the data movement are checked against an independent
  floating-point model, over every qubit position and every operating mode,
  up to the full 17-qubit size.
* What has not been checked is timing closure, FPGA resource use, and
  behaviour when the host breaks the rules above.
* The published resource figures (LUTs, DSPs, BRAMs, power) describe the
  original FPGA build, not this RTL.
