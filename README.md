# QUASAR / qV quantum control unit

## Design idea

A quantum control processor has to tell the pulse hardware which gate to play on which
qubit, and it has to do this again every time stamp. A time stamp is the interval between
two gate layers, and it is as short as the shortest gate pulse, about 20 ns for a
superconducting single-qubit gate. The paper argues that the instruction set decides whether
a control processor keeps up. With one instruction per gate, a dense layer on many qubits
cannot be issued in 20 ns. The paper offers two RISC-V extensions that name many gates at
once:

* **QUASAR** (scalar). A gate instruction addresses either one qubit through a 9-bit
  immediate, or up to 32 qubits through a *sliding mask*. The mask is a 32-bit
  general-purpose register, and a 4-bit immediate selects which 32-qubit window it covers.
  Two more instructions advance the time stamp.
* **qV** (vector). Vector registers hold lists of qubit indices and gate codes. VQQI applies
  one gate to every element (SIMD). VQQG applies a gate vector element by element (MIMD).
  A zero qubit index or a zero gate code is a NOP, which masks an element.

This RTL is the quantum part of such a processor. It takes instructions that the host RV32
core hands over, together with their register operands. It turns each instruction into a
*gate bundle*: all the gates of that instruction, tagged with one time stamp. It holds the
bundles until their time stamp comes up in real time, and then hands them to the pulse back
end. A gate released after its time stamp is flagged late, and late gates are counted. So the
design checks its own timing constraint, the quantity the paper studies.

One instruction is taken per clock cycle, the rate assumed by the paper's timing model
(instructions per time stamp against the clock period). The bundle is the key to this. An
instruction that names 32 qubits still costs one cycle, because its 32 gates leave together
in 32 lanes rather than one after the other.

## Structure

```
 host core ──q_valid/q_ready, inst, rs1, rs2──► qcu_decoder
                                                   │ dec_t
               ┌───────────────────────────────────┼─────────────────────┐
               ▼                                   ▼                     ▼
          quasar_unit                           qv_vld ──dmem──►     qv_unit
   (2 × sliding_mask, ts_issue)                    │ element writes   │ whole-register reads
               │                                   └──► qv_vrf ◄──────┘
               │ gate_bundle_t                                        │ gate_bundle_t
               └──────────────────────────┬───────────────────────────┘
                                          ▼
                              ts_dispatch (FIFO, ts_now, late)
                                          │ gate_valid / gate_cmd / gate_late
                                          ▼
                                  pulse back end ──meas──► meas_reg ──► host (rd_win)
```

| file | block |
|---|---|
| `rtl/quasar_pkg.sv` | constants, instruction classes, gate numbers, `dec_t`, `gate_cmd_t`, `gate_bundle_t` |
| `rtl/qcu_decoder.sv` | combinational decoder for QUASAR and qV words |
| `rtl/sliding_mask.sv` | mask + window → up to 32 qubit IDs, packed by rank |
| `rtl/quasar_unit.sv` | QUASAR gate, TSi and TSr instructions; owns the issue time stamp |
| `rtl/qv_vrf.sv` | 32 vector registers × 32 elements × 32 bits |
| `rtl/qv_vld.sv` | VLD: MVL words from data memory into a vector register |
| `rtl/qv_unit.sv` | VQQI / VQQG with NOP masking |
| `rtl/ts_dispatch.sv` | bundle FIFO, real-time time stamp, release and late detection |
| `rtl/meas_reg.sv` | one result bit and one arrived bit per qubit, read by window |
| `rtl/qcu_top.sv` | top level |

## Instruction encoding

The field widths are those printed in the paper's encoding figure. Bit positions are found
by adding up the widths from bit 31. Bits [1:0] give the instruction class: 00 QUASAR,
01 qV, 11 base RV32. This class coding is this design's own; the figure prints the field
without values.

**QUASAR, immediate mode** (opcode[4] = 0)

| 31:26 | 25 | 24:20 | 19:12 | 11:7 | 6:2 | 1:0 |
|---|---|---|---|---|---|---|
| – | qubit[8] | qubit1[8:4] | qubit[7:0] | qubit1[3:0] in 10:7 | opcode | 00 |

**QUASAR, mask mode** (opcode[4] = 1)

| 31:26 | 25 | 24:20 | 19:15 | 14:12 | 11:7 | 6:2 | 1:0 |
|---|---|---|---|---|---|---|---|
| – | win[3] | rs2 | rs1 | win[2:0] | – | opcode | 00 |

The opcode is 5 bits: opcode[4] is the addressing mode and opcode[3:0] the gate. The gates
are X90, −X90, X180, Y90, −Y90, Y180, Z90, −Z90, Z180, H, Rz, MEAS, CNOT, CZ, SWAP (codes
0–14). Codes 12–14 are the two-qubit gates. Code 15 is time control: TSi (mode 0) adds the
20-bit immediate in [31:12] to the issue time stamp, and TSr (mode 1) adds rs1. The paper
gives both "15 unique gates" and "2^5 gate types, two reserved for timing". Splitting the
opcode into a mode bit and a 4-bit gate satisfies both statements. Where the second qubit of
a two-qubit immediate gate goes (`{[24:20],[10:7]}`), and the use of rs2 as the second mask
of a two-qubit mask gate, are this design's choices.

**qV**

| 31:25 | 24:20 | 19:15 | 14:12 | 11:7 | 6:2 | 1:0 |
|---|---|---|---|---|---|---|
| – | vr2 (qubit1) | vr1 (qubit0 / address gpr for VLD) | – | vr3 (gate) / vd for VLD | opcode | 01 |

qV opcode 0 is NOP, 30 is VLD and 31 is VQQG. Every other value is VQQI with that gate code.

## Blocks

**Sliding mask.** This block is combinational. Set bit *b* of the mask in window *w* selects
qubit `w*32 + b`. With 16 windows, every one of the 512 qubits reachable in immediate mode is
also reachable by mask. The IDs are packed by rank: lane *k* carries the *k*-th set bit. This
lets a two-qubit mask gate pair the *k*-th qubit of the rs1 mask with the *k*-th qubit of the
rs2 mask.

**QUASAR unit.** It takes one instruction per cycle whenever its output register is free or
being drained. An immediate gate produces a bundle with lane 0 in use. A mask gate produces a
bundle with one lane per set bit, and an empty mask produces no bundle. TSi and TSr only move
`ts_issue`. Gate codes leave as gate+1, so that 0 means NOP on the back-end side as it does
in qV.

**qV.** The vector register file has one element write port, used by VLD. It also has three
read ports, each returning a whole register, so that a VQQG can read its qubit0, qubit1 and
gate lists in the same cycle. VLD reads MVL consecutive 32-bit words, starting at the byte
address in a general-purpose register, with one memory request outstanding. With a
single-cycle memory this takes MVL+1 cycles. VQQI/VQQG put element *i* in lane *i*:

* the qubit indices count from 1;
* a zero vr1 index or a zero gate code makes the element a NOP;
* a zero vr2 index makes the element a single-qubit gate;
* IDs sent to the back end count from 0.

The paper describes both masking rules, and both are implemented. At MVL = LANES = 32, a
vector instruction takes one cycle. A larger MVL takes ⌈MVL/32⌉ beats, one bundle per
cycle. The unit testbench checks this path at MVL = 64.

**Timing controller** (`ts_dispatch`). Bundles wait in a 16-entry FIFO, and a full FIFO
stalls the host. After `ts_start`, a counter `ts_now` advances every 4 cycles, which is 20 ns
at the 200 MHz FPGA clock the paper considers. The head bundle leaves when `ts <= ts_now`.
It is flagged late when `ts < ts_now`, and its gates are then added to `late_count`. One
bundle leaves per cycle.

**Measurement register.** It holds a result bit and an arrived bit for each of the 512
qubits. The host reads them 32 at a time, by window. A result word can then be used directly,
or after inversion, as the mask of a feedback gate. This gives the direct access to
measurement data that the paper credits QUASAR/qV with.

## Parameters

| name | value | origin |
|---|---|---|
| qubits | 512 | paper (9-bit immediate) |
| mask width / windows | 32 / 16 | paper (32-bit mask, 4-bit offset) |
| opcode | 5 bits | paper |
| MVL, VES | 32, 32 bits | paper (128-byte vector block) |
| vector registers | 32 | own (5-bit register fields) |
| lanes per bundle | 32 | own |
| gate FIFO depth | 16 | own |
| cycles per time stamp | 4 | paper (20 ns, 200 MHz) |
| time-stamp width | 32 bits | own |

## Where this design departs from or fills in the paper

* The paper names its timing-control unit but describes only what it does. The FIFO, the
  release rule and the late rule are this design's own.
* The paper gives the element size both as log2(max(qubits, gates)) and as "32 VES". The
  design uses 32.
* The paper's text says 200 MHz and a figure legend says 250 MHz. The design follows the
  text.
* The Rz angle has no field in the published encoding, so only the gate code is sent.
* The host core, caches, pulse generation, AWG/DAC/ADC, analog chain and the qubit chip
  are not built. The paper does not design them. Their interfaces are ports of `qcu_top`,
  and the testbenches act as the host, the memory and the back end.
* Reset is asynchronous and active-low, and all handshakes are valid/ready. Both are this
  design's own.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench ends with a
`TB_RESULT checks=… failures=…` line and stops on a watchdog.

* `tb_qcu_top` runs the full design at its default parameters. It acts as the host, the
  memory and the back end, on 32 qubits:
  * Grover's operator in both addressing modes;
  * a CZ mask layer and a TSr;
  * measurement followed by feedback through the measurement register;
  * a qV section with five VLDs, one VQQG and one VQQI.

  It checks every delivered gate and its time stamp. It also checks that each mechanism
  occurs at least once: host stall, FIFO full, late and on-time gates, immediate, mask and
  two-qubit gates, TSr, VLD, VQQG, VQQI, NOP elements and feedback.
* `tb_workloads` runs QFT-32, Grover-32 and single-time-stamp density sweeps. It prints the
  cycles used per time stamp.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/quasar_pkg.sv tb/tb_qcu_top.sv \
          --top-module tb_qcu_top -y rtl
./obj_dir/Vtb_qcu_top
```

### Workload results (default parameters, 4 cycles per time stamp)

The synthetic rows repeat the same time stamp 16 times. The real-time clock starts one
cycle before the first instruction, and the back end is always ready. "cycles/stamp" is
the total cycles divided by the number of time stamps. Because gates are never released
early, it cannot fall below 4.

| workload | gates | stamps | cycles/stamp | late gates | program |
|---|---|---|---|---|---|
| QFT, 32 qubits, immediate mode | 2512 | 2512 | 4.00 | 0 | 20096 B |
| Grover's operator, 32 qubits | 161 | 37 | 3.97 | 0 | 296 B |
| 2 gates/stamp, immediate | 32 | 16 | 4.00 | 0 | 192 B |
| 4 gates/stamp, immediate | 64 | 16 | 5.19 | 61 | 320 B |
| 8 gates/stamp, immediate | 128 | 16 | 9.19 | 126 | 576 B |
| 32 gates/stamp, 12 types, immediate | 512 | 16 | 33.19 | 510 | 2112 B |
| 32 gates/stamp, 1 type, mask | 512 | 16 | 3.94 | 0 | 128 B |
| 32 gates/stamp, 32 types, VQQG | 512 | 16 | 3.94 | 0 | 140 B + 384 B data |
| 16 CZ pairs/stamp, immediate | 256 | 16 | 17.19 | 254 | 1088 B |
| 16 CZ pairs/stamp, mask (rs1/rs2) | 256 | 16 | 3.94 | 0 | 128 B |
| 16 CZ pairs/stamp, VQQI | 256 | 16 | 3.94 | 0 | 136 B + 256 B data |

Program size counts 4 bytes per instruction, plus the vector data that the VLDs read.

A time stamp of *n* instructions needs *n* cycles. The design therefore keeps up with real
time whenever *n* ≤ `CYCLES_PER_TS`. In immediate mode, *n* = gates + 1 (the TSi). At
200 MHz (4 cycles) that allows at most 3 gates per time stamp. At 500 MHz (set
`CYCLES_PER_TS` = 10) it allows 9, which matches the paper's finding of up to eight gates on
an FPGA. A mask instruction covers a whole layer of one gate type. VQQG covers any mix of
gate types. Both stay at 2 instructions per time stamp and meet 20 ns at 200 MHz.

The qV rows assume the vector registers were loaded before the clock started. VLD moves
one 32-bit element per memory response, so it takes at least MVL+1 cycles; with the
testbench memory, which answers one cycle after a request, it takes 65. A qV program that
reloads its lists inside every time stamp therefore does not meet 20 ns here. The paper's
model counts a VLD as one instruction; the width of the memory port is not given, and this
design uses a single 32-bit port.
