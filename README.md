# QSU: a state-vector quantum circuit simulator in SystemVerilog

This is a synthesizable quantum simulation unit (QSU). It holds the full state
vector of an n-qubit register and updates every amplitude in parallel, one
gate at a time. By default it simulates 7 qubits (128 complex amplitudes) and
is parameterized for any n ≥ 2. A host processor loads a circuit through four
32-bit registers and reads back either a measured result or the whole state.
The design implements the architecture of L. Belfore, *A Scalable FPGA
Architecture for Quantum Computing Simulation*. Where that description is
incomplete or contradicts itself, the choices made here are listed below.

## Datapath

```
            +-------------------------------------------------------------+
            |                                                             |
  IM ---> QSR --> Gate Operand --> Self-Routing   --+--> One-Qubit  -- D1 -+
 (load)  2^n amps  Selector       Permutation Net.  |    Gate Pool         |-- mux --> QSR
                    ^  (tags)     (Benes, 2n-1 col.)+--> Two-Qubit  -- D0 -+    ^ S
                    |                                    Gate Pool              |
           pi-State Manager <--- q0,q1 --- Gate Issue Module (FIFO + FSM) ------+
                                                   ^
                                   HPS register bus (HPS_control, Fabric_status,
                                                     HPS_data, Fabric_data)
```

Each gate makes one pass of the whole state through this loop. The pass
works as follows:

1. The **gate operand selector** tags each amplitude with its destination
   index.
2. The **self-routing permutation network** moves every amplitude to its
   tagged position. For a one-input gate this places the gate's qubit at
   index bit 0, so the operands of each gate unit sit in adjacent pairs
   (2c, 2c+1). For a two-input gate it also places the second qubit at bit 1,
   giving adjacent quartets (4c … 4c+3).
3. All 2^(n-1) one-input units, or all 2^(n-2) two-input units, compute in
   the same clock.
4. The mux writes the result back into the **QSR**.

The state is not permuted back after each gate. The **pi-State Manager**
remembers the current qubit order (`lay[q]` is the index bit that holds
qubit q). It computes the next permutation from that order, so each gate
needs only one trip through the single network. The END gate at the end of a
circuit restores the original order. The result reporting module then looks
at the state, and the host can read it.

## Blocks

| Block | Module | Role |
|---|---|---|
| QSR | `qsr` | 2^n registers of 36 bits. Cleared or reset to \|0…0⟩. Three write paths and a readback port. |
| Initialization Manager | `init_manager` | Loads any initial state, real and imaginary part per word, then asks the one-qubit pool to normalize it. |
| Gate Issue Module | `gate_issue_module`, `gate_fifo` | 64-entry circuit buffer that can be appended to while running, plus the top-level state machine. |
| pi-State Manager | `pi_state_manager` | Current qubit order, next bit permutation, restore. |
| Gate Operand Selector | `gate_operand_selector` | Destination tag of each component. |
| Self-Routing Permutation Network | `srpn`, `srpn_benes` | Benes network of 2n−1 columns of 2^(n-1) self-setting 2×2 switches. The recursive structure is unrolled into generated columns. Registered output. |
| One-Qubit Gate Pool | `one_qubit_gate_pool`, `one_qubit_unit`, `adder_network`, `prng`, `sqrt_unit`, `recip_unit` | 2×2 complex matrix units, error gates, measurement and normalization. |
| Two-Qubit Gate Pool | `two_qubit_gate_pool`, `two_qubit_unit` | CNOT, CY, CZ, √ZZ and SWAP. Each output row routes one input and rotates it by a quarter turn, with no multipliers. |
| Result Reporting Module | `result_reporting_module` | Index of the single unit-magnitude component, or an "entangled" flag. |
| Host interface | `hps_interface` | The four registers. |
| Top | `qsu_top` | Everything above. Its only ports are the clock, the reset and the register bus. |

## Number formats

- **Amplitude.** The real and imaginary parts are each 18-bit two's
  complement with 16 fraction bits (Q1.16), so 1.0 = 65536 and
  1/√2 = 46341. Products are rounded to nearest and saturated.
- **Probability.** |a|² and the adder-network sums use 44 bits with 32
  fraction bits. This doubles the precision, as the extended-precision
  adder network requires.
- **Normalization factor 1/√P.** Unsigned, 27 bits, 16 fraction bits.

## Gate word (pushed through HPS_data)

| Bits | Field |
|---|---|
| [4:0] | opcode |
| [11:8] | qa: the qubit of a one-input gate; the target of CNOT/CY/CZ (becomes index bit 0) |
| [15:12] | qb: the control of CNOT/CY/CZ (becomes index bit 1) |
| [23:16] | error probability of Ex/Ey/Ez, in units of 1/256 |

Opcodes:

| Code | Gate | Code | Gate | Code | Gate |
|---|---|---|---|---|---|
| 0 | Nop | 6 | √Y | 12 | Ey |
| 1 | X | 7 | S | 13 | Ez |
| 2 | Y | 8 | S⁻¹ | 14 | M |
| 3 | Z | 9 | T | 16 | CNOT |
| 4 | H | 10 | T⁻¹ | 17 | CY |
| 5 | V (√X) | 11 | Ex | 18 | CZ |
| | | | | 19 | √ZZ |
| | | | | 20 | SWAP |
| | | | | 31 | END |

The gate matrices are those of the paper's gate tables, copied as printed.
In particular, Y is [0 j; −j 0].

## Register map

| Addr | Register | Access | Contents |
|---|---|---|---|
| 0 | HPS_control | W | [0] run. [1] clear the state, qubit order, buffer and result (pulse). [2] load an initial state from the next 2·2^n data words (pulse). [3] rewind readback (pulse). [5:4] Fabric_data source: 0 = result, 1 = state, 2 = measurement record, 3 = qubit order. |
| 1 | Fabric_status | R | [0] busy. [1] buffer full. [2] buffer empty. [3] loading. [4] result valid. [5] single result. [6] entangled. [7] routing conflict. [15:8] gates in the buffer. [31:16] gates completed. |
| 2 | HPS_data | W | A gate word, or an initial-state word. |
| 3 | Fabric_data | R | The result, the next state word, or a debug word (see below). |

- **Result word.** [31] valid, [30] single, [29] entangled, [n−1:0] index.
- **State readback.** Each read returns the next part of the state: real
  then imaginary part of amplitude 0, then amplitude 1, and so on. Each part
  is a sign-extended Q1.16 value.
- **Measurement record** (debug). [31] the last measured value. [30] whether
  the last error gate applied its Pauli. [16:0] the last probability sum in
  Q1.16: P0 for a measurement, the total for a normalization.
- **Qubit order** (debug). Four bits per qubit, qubit q in [4q+3:4q], for the
  first 8 qubits. Each field is the index bit that currently holds that
  qubit. After END it reads 0x…3210.

A typical run:

1. Clear the unit.
2. Push the gate words, ending with END.
3. Set run.
4. Poll until the unit is idle and the buffer is empty.
5. Read Fabric_data.

## Timing

- **Unitary gate:** 4 clocks, one for each state: pop, issue, permute,
  write.
- **Measurement:**
  - The zero probability P0 is summed in the first pass.
  - The sequencer compares P0 with a 32-bit xorshift PRNG. The qubit
    collapses to 1 when P0 < prn.
  - A mux selects P0 or 1 − P0.
  - The restoring square root takes 22 clocks and the restoring reciprocal
    takes 33.
  - A second pass zeroes the losing half and scales the winning half.
  - A measurement that collapses the state takes about 61 clocks. One that
    finds the qubit already sharp (within 2^n·2^-16 of 0 or 1) needs no
    square root, reciprocal or second pass, and changes nothing.
- **7-qubit random circuit of the paper (53 gates):** 599 clocks per run,
  against 1,430 in the paper. The unitary part and END take 191 clocks and
  the seven measurements take 408. The paper reports 271 clocks for its
  measurements, so this design's serial square root and reciprocal are
  slower. Its unitary gates are faster.

## Choices that differ from, or are missing in, the paper

- **Network depth.** The text gives "(n/2−1) layers of 2^(n-1) switching
  elements", but the paper's 16-input example network has seven columns.
  The network here has 2n−1 columns, as in the figure. The switch rule is
  this design's own, because the paper refers elsewhere for it. An input
  switch crosses when its upper element's destination bit 0 is 1. An output
  switch crosses when the element from the upper half has bit 0 = 1. This
  rule routes every permutation of index bits without collision.
- **QSR order.** One section says the QSR keeps the original qubit order.
  Two others describe remembering the permutation and restoring it only at
  the end. The design follows the latter.
- **CNOT direction in the random-circuit workload.** Qubit 0 is taken as the
  least significant index bit. The published 10,000-trial table (64
  outcomes, at 3/128 and 1/128) is reproduced exactly only when each CNOT of
  the circuit has its control on the higher-numbered qubit of the pair. The
  circuit as drawn, with the control on the lower qubit, gives a different
  16-state support. The random-circuit testbench uses the direction that
  reproduces the published table. The published probability column is ten
  times smaller than its counts imply: 246 of 10,000 is printed as 0.00246.
- **Simple test circuit.** The text says "a measurement of one qubit, a
  controlled-NOT gate, and then the subsequent measurement of the remaining
  qubits". The schematic shows three measurements before the CNOT. The
  schematic is followed.
- **Not specified by the paper, chosen here:**
  - the gate-word format and opcodes
  - the register bit assignments and the choice of debug words
  - the END gate
  - the measurement tolerance
  - the RRM thresholds (a component is zero below 256/65536 per part; a
    single result must have |a|² within 1/16 of 1; each collapse rescales by 1/√(1 − P0), so rounding drift in the total probability reaches the last amplitude, and |a|² = 1.024 was seen)
  - the PRNG type
  - the SQRT and 1/X algorithms
  - the buffer depth
  - one register stage after the permutation network
- **Not built:** the Arm hard processor system and its Linux software. The
  testbenches drive the register bus directly. No FPGA place-and-route was
  done, so the paper's resource table was not reproduced. A rough count is
  about 1,536 multipliers for 7 qubits, against 4,510 DSP blocks on the
  paper's device.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The floating-point reference model
`tb/qsu_ref_pkg.sv` applies the same gates to a real-valued state vector.

- **`tb_qsu_top`** (4 qubits) drives only the register bus. It covers:
  - every gate, on every ordered qubit pair
  - the paper's simple circuit
  - collapsing and sharp measurements
  - loading normalized and unnormalized initial states
  - error gates that fire and error gates that do not
  - gates appended while the unit runs
  - the two debug words

  It compares the full state after each END and counts each mechanism
  inside the unit. A mechanism that never happens is a failure.
- **`tb_qsu_random_circuit`** runs the 7-qubit unit at its default
  parameters. It checks:
  - the full state against the reference
  - the outcome probabilities against the published table
  - 2,000 measured runs: each must report a single outcome from the table
  - the histogram of those runs: all 64 listed outcomes occur, the 3/128
    class takes close to 3/4 of them, and the chi-square against the
    published probabilities is small (46 with 63 degrees of freedom)
  - the clock count of each run: no more than 1,430
- **Block testbenches** check each block on its own: the Benes network for
  random index-bit permutations at 128 inputs and all 24 at 16 inputs,
  and the pi-State Manager against an independent model. The arithmetic
  units are checked at corner values and with random operands.

Example with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/qsu_pkg.sv tb/qsu_ref_pkg.sv \
  tb/tb_qsu_random_circuit.sv --top-module tb_qsu_random_circuit -o sim
./obj_dir/sim
```
