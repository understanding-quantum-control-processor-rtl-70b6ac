// quasar_pkg: types and constants shared by the QUASAR / qV quantum control unit.
//
// QUASAR is a scalar quantum extension of RV32: one 32-bit instruction applies one gate
// either to a single qubit named by a 9-bit immediate (512 qubits) or to every qubit
// selected by a 32-bit mask register within one of 16 windows of 32 qubits (the
// "sliding mask"). qV is the vector form: vector registers of MVL elements, VES bits
// each, hold lists of qubit indices (counted from 1, 0 = no operation) and gate types.
//
// Field widths and their left-to-right order follow the published encodings; bit
// positions are obtained by adding those widths from bit 31 down. What the encodings
// do not fix is this design's own choice and is marked "chosen" below: the value of the
// 2-bit field at [1:0] that tells QUASAR, qV and plain RV32 apart, the gate numbering,
// the placement of the second qubit of a two-qubit immediate, and the time-stamp fields.
// Gates travel as bundles: every gate of one instruction (up to LANES = 32) moves in one
// cycle, so that a mask-mode or vector instruction is as parallel in hardware as it is
// in the encoding.
package quasar_pkg;

  // ---------------- QUASAR ----------------
  localparam int unsigned NUM_QUBITS = 512;  // 9-bit immediate qubit field
  localparam int unsigned QID_W      = 9;
  localparam int unsigned MASK_W     = 32;   // mask register = one general-purpose register
  localparam int unsigned WIN_W      = 4;    // window offset immediate
  localparam int unsigned OPC_W      = 5;    // the 5-bit opcode field at [6:2]
  localparam int unsigned TSIMM_W    = 20;   // chosen: TSi immediate in [31:12]

  // ---------------- qV ----------------
  localparam int unsigned VES   = 32;        // vector element size in bits
  localparam int unsigned MVL   = 32;        // maximum vector length (elements)
  localparam int unsigned NVREG = 32;        // 5-bit vector register specifiers
  localparam int unsigned VR_W  = 5;

  // ---------------- gate commands ----------------
  localparam int unsigned TS_W    = 32;      // time-stamp counter width (chosen)
  localparam int unsigned CMD_Q_W = 32;      // qubit field of a gate command (>= VES)
  localparam int unsigned CMD_G_W = 32;      // gate field of a gate command (>= VES)
  localparam int unsigned LANES   = 32;      // gates per bundle: one mask window / one
                                             // vector register (chosen = MASK_W = MVL)

  // Instruction class in bits [1:0] (chosen). RV32 base instructions keep 2'b11.
  typedef enum logic [1:0] {
    CLS_QUASAR = 2'b00,
    CLS_QV     = 2'b01,
    CLS_RSVD   = 2'b10,
    CLS_RV32   = 2'b11
  } iclass_e;

  // QUASAR gate numbers, opcode[3:0] (chosen numbering; 15 gates + the timing pair).
  // opcode[4] selects the addressing mode: 0 immediate, 1 mask.
  typedef enum logic [3:0] {
    G_X90  = 4'd0,  G_XM90 = 4'd1,  G_X180 = 4'd2,
    G_Y90  = 4'd3,  G_YM90 = 4'd4,  G_Y180 = 4'd5,
    G_Z90  = 4'd6,  G_ZM90 = 4'd7,  G_Z180 = 4'd8,
    G_H    = 4'd9,  G_RZ   = 4'd10, G_MEAS = 4'd11,
    G_CNOT = 4'd12, G_CZ   = 4'd13, G_SWAP = 4'd14,
    G_TIME = 4'd15                    // TSi (immediate mode) / TSr (mask mode position)
  } qgate_e;

  localparam logic [3:0] FIRST_TWO_QUBIT_GATE = 4'd12;

  // qV opcodes in [6:2] (chosen): 0 NOP, 1..29 VQQI with that gate, 30 VLD, 31 VQQG.
  localparam logic [OPC_W-1:0] QV_NOP  = 5'd0;
  localparam logic [OPC_W-1:0] QV_VLD  = 5'd30;
  localparam logic [OPC_W-1:0] QV_VQQG = 5'd31;

  typedef enum logic [2:0] {
    OP_NONE  = 3'd0,   // not for the quantum unit (RV32 base) or qV NOP
    OP_QGATE = 3'd1,   // QUASAR gate, immediate or mask
    OP_TSI   = 3'd2,   // advance issue time stamp by immediate
    OP_TSR   = 3'd3,   // advance issue time stamp by rs1
    OP_VLD   = 3'd4,   // qV vector load
    OP_VQQI  = 3'd5,   // qV: one gate, two qubit-index vectors
    OP_VQQG  = 3'd6    // qV: gate vector, two qubit-index vectors
  } op_e;

  typedef struct packed {
    op_e               op;
    logic              mask_mode;   // QUASAR: 1 = mask addressing
    logic              two_q;       // QUASAR: gate acts on two qubits
    logic [3:0]        gate;        // QUASAR gate number
    logic [OPC_W-1:0]  opcode;      // raw [6:2]; VQQI gate
    logic [QID_W-1:0]  q0_imm;      // {imm[8], imm[7:0]}
    logic [QID_W-1:0]  q1_imm;      // second qubit of a two-qubit immediate (chosen)
    logic [WIN_W-1:0]  win;         // {imm[3], imm[2:0]}
    logic [TSIMM_W-1:0] ts_imm;
    logic [VR_W-1:0]   vr1;         // [19:15] (also rs1)
    logic [VR_W-1:0]   vr2;         // [24:20] (also rs2)
    logic [VR_W-1:0]   vr3;         // [11:7]  (VQQG gate vector, VLD destination)
  } dec_t;

  // One gate for the pulse back end. Gate 0 is reserved for NOP and never sent;
  // QUASAR gate g is sent as g+1 so that both extensions share one gate space.
  typedef struct packed {
    logic [CMD_G_W-1:0] gate;
    logic               two_q;
    logic [CMD_Q_W-1:0] q0;        // qubit (control qubit of a two-qubit gate), from 0
    logic [CMD_Q_W-1:0] q1;        // target qubit of a two-qubit gate, from 0
    logic [TS_W-1:0]    ts;        // time stamp the gate belongs to
  } gate_cmd_t;

  // All gates one instruction produces, delivered together in one cycle. Lane k holds
  // the k-th gate of the instruction in program order; invalid lanes carry nothing.
  typedef struct packed {
    logic [LANES-1:0]            valid;
    gate_cmd_t [LANES-1:0]       cmd;
  } gate_bundle_t;

  function automatic logic is_two_qubit(input logic [3:0] g);
    return (g >= FIRST_TWO_QUBIT_GATE) && (g != G_TIME);
  endfunction

endpackage
