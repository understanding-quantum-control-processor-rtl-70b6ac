// qcu_decoder: field decoder for QUASAR and qV instructions.
//
// Purely combinational. It takes the 32-bit instruction word handed over by the host
// RV32 core and splits it into the fields of a dec_t (see quasar_pkg).
//
// Field widths and order are the published ones, read from bit 31 down:
//   QUASAR immediate : [31:26] unused, [25] imm[8], [24:20] unused, [19:12] imm[7:0],
//                      [11:7] unused, [6:2] opcode (gate), [1:0]
//   QUASAR mask      : [31:26] unused, [25] imm[3], [24:20] unused, [19:15] rs1,
//                      [14:12] imm[2:0], [11:7] unused, [6:2] opcode (gate), [1:0]
//   qV VQQI          : [31:25] unused, [24:20] vr2, [19:15] vr1, [14:7] unused,
//                      [6:2] opcode (gate), [1:0]
//   qV VQQG          : as VQQI but [11:7] vr3 (gate vector)
// This design's own choices: [1:0] selects the class (00 QUASAR, 01 qV, 11 RV32 base);
// opcode[4] is the addressing mode and opcode[3:0] the gate, with gate 15 used for the
// two time-stamp instructions (TSi, immediate in [31:12]; TSr, amount in rs1);
// a two-qubit immediate gate puts its second qubit in {[24:20],[10:7]}; a two-qubit mask
// gate takes its second mask from rs2 ([24:20]); VLD names its destination in [11:7]
// and its address register in [19:15]; qV opcodes 30 and 31 are VLD and VQQG.
module qcu_decoder
  import quasar_pkg::*;
(
  input  logic [31:0] inst,
  output dec_t        dec
);

  always_comb begin
    dec           = '0;
    dec.opcode    = inst[6:2];
    dec.mask_mode = inst[6];
    dec.gate      = inst[5:2];
    dec.two_q     = is_two_qubit(inst[5:2]);
    dec.q0_imm    = {inst[25], inst[19:12]};
    dec.q1_imm    = {inst[24:20], inst[10:7]};
    dec.win       = {inst[25], inst[14:12]};
    dec.ts_imm    = inst[31:12];
    dec.vr1       = inst[19:15];
    dec.vr2       = inst[24:20];
    dec.vr3       = inst[11:7];
    unique case (iclass_e'(inst[1:0]))
      CLS_QUASAR: begin
        if (inst[5:2] == G_TIME) dec.op = inst[6] ? OP_TSR : OP_TSI;
        else                     dec.op = OP_QGATE;
      end
      CLS_QV: begin
        unique case (inst[6:2])
          QV_NOP:  dec.op = OP_NONE;
          QV_VLD:  dec.op = OP_VLD;
          QV_VQQG: dec.op = OP_VQQG;
          default: dec.op = OP_VQQI;
        endcase
      end
      default: dec.op = OP_NONE;
    endcase
  end

endmodule
