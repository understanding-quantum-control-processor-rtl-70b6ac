// tb_qcu_decoder: self-checking test of the QUASAR/qV field decoder.
// The testbench assembles instructions from their fields with its own encoder (field
// widths as published, read from bit 31 down) and checks that the decoder returns the
// same fields and the right operation for every class and opcode.
module tb_qcu_decoder;
  import quasar_pkg::*;

  logic [31:0] inst;
  dec_t        dec;
  int checks = 0, failures = 0;

  qcu_decoder dut (.inst, .dec);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s inst=%h", what, inst);
    end
  endtask

  // QUASAR immediate: 6 | imm[8] | 5 | imm[7:0] | 5 | opcode | 2
  function automatic logic [31:0] enc_imm(logic [4:0] opc, logic [8:0] q, logic [8:0] q1);
    return {6'b0, q[8], q1[8:4], q[7:0], 1'b0, q1[3:0], opc, 2'b00};
  endfunction
  // QUASAR mask: 6 | imm[3] | 5 | rs1 | imm[2:0] | 5 | opcode | 2
  function automatic logic [31:0] enc_mask(logic [4:0] opc, logic [3:0] w, logic [4:0] rs1, logic [4:0] rs2);
    return {6'b0, w[3], rs2, rs1, w[2:0], 5'b0, opc, 2'b00};
  endfunction
  // qV: 7 | vr2 | vr1 | 3 | vr3 | opcode | 2
  function automatic logic [31:0] enc_qv(logic [4:0] opc, logic [4:0] v1, logic [4:0] v2, logic [4:0] v3);
    return {7'b0, v2, v1, 3'b0, v3, opc, 2'b01};
  endfunction

  initial begin
    for (int n = 0; n < 400; n++) begin
      logic [8:0] q, q1; logic [3:0] g, w; logic [4:0] r1, r2, r3, o;
      q = 9'($urandom); q1 = 9'($urandom); g = 4'($urandom_range(0, 14)); w = 4'($urandom);
      r1 = 5'($urandom); r2 = 5'($urandom); r3 = 5'($urandom); o = 5'($urandom);
      inst = enc_imm({1'b0, g}, q, q1); #1;
      check(dec.op == OP_QGATE && !dec.mask_mode && dec.gate == g && dec.q0_imm == q, "imm gate");
      check(dec.two_q == (g >= 12), "two-qubit class");
      if (g >= 12) check(dec.q1_imm == q1, "imm second qubit");
      inst = enc_mask({1'b1, g}, w, r1, r2); #1;
      check(dec.op == OP_QGATE && dec.mask_mode && dec.gate == g && dec.win == w
            && dec.vr1 == r1 && dec.vr2 == r2, "mask gate");
      inst = enc_qv(o, r1, r2, r3); #1;
      if (o == 0)       check(dec.op == OP_NONE, "qv nop");
      else if (o == 30) check(dec.op == OP_VLD && dec.vr3 == r3 && dec.vr1 == r1, "vld");
      else if (o == 31) check(dec.op == OP_VQQG && dec.vr1 == r1 && dec.vr2 == r2 && dec.vr3 == r3, "vqqg");
      else              check(dec.op == OP_VQQI && dec.opcode == o && dec.vr1 == r1 && dec.vr2 == r2, "vqqi");
      inst = {$urandom} | 32'h3; #1;
      check(dec.op == OP_NONE, "rv32 ignored");
    end
    inst = {20'd1234, 5'd0, 5'b01111, 2'b00}; #1;
    check(dec.op == OP_TSI && dec.ts_imm == 20'd1234, "TSi");
    inst = {12'd0, 5'd7, 3'd0, 5'd0, 5'b11111, 2'b00}; #1;
    check(dec.op == OP_TSR && dec.vr1 == 5'd7, "TSr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
