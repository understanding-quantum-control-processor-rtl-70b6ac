// tb_qcu_top: end-to-end test of the quantum control unit with every parameter at its
// default (512 qubits, MVL 32, VES 32, 32 vector registers, 16-entry gate FIFO,
// 4 cycles per time stamp).
// The testbench plays the host RV32 core, the data memory and the pulse/readout back
// end. It runs, on 32 qubits:
//   1. Grover's operator in QUASAR: H and X layers in mask mode, single H in immediate
//      mode, CNOTs (control qubit i, target qubit 0) in immediate mode, TSi between layers;
//   2. a two-qubit CZ layer in mask mode (rs1/rs2 masks) and a TSr;
//   3. a MEAS layer, then measurement-dependent feedback: the host reads the result
//      window and applies X to every qubit that read 0 as one mask-mode instruction;
//   4. the same kind of layers in qV: VLD of qubit, partner and gate lists, one VQQG
//      (mixed gates, NOP elements) and one VQQI (CZ pairs).
// While building the program the testbench writes down every gate it expects, with its
// time stamp, and checks the gates delivered in order. It keeps its own real-time
// clock (cycles since ts_start / 4) and checks the late flag and late_count against it.
// The real-time clock is started 150 cycles in, so that the gate FIFO fills and the
// host is stalled first; the long vector loads later make the qV gates late.
// It counts each mechanism: host stall, FIFO full, late gate, on-time gate, immediate,
// mask and two-qubit gates, TSr, vector load, VQQG, VQQI, NOP elements, measurement
// feedback; a mechanism that never happens is a failure.
module tb_qcu_top;
  import quasar_pkg::*;
  localparam int CPT = 4;
  localparam int N = 32;

  logic clk = 0, rst_n = 0;
  logic q_valid = 0, q_ready, q_idle;
  logic [31:0] q_inst = 0, q_rs1 = 0, q_rs2 = 0;
  logic dmem_req, dmem_rvalid;
  logic [31:0] dmem_addr, dmem_rdata;
  logic ts_start = 0, gate_valid, gate_ready = 1, gate_late;
  gate_bundle_t gate_cmd;
  logic [31:0] ts_now, late_count;
  logic meas_valid = 0, meas_bit = 0, meas_clr = 0;
  logic [8:0] meas_qubit = 0;
  logic [3:0] meas_rd_win = 0;
  logic [31:0] meas_rd_data, meas_rd_done;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  qcu_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_full = 0, n_late = 0, n_ontime = 0, n_imm = 0, n_mask = 0, n_two = 0;
  int n_tsr = 0, n_vld = 0, n_vqqg = 0, n_vqqi = 0, n_nop = 0, n_feedback = 0;

  // ---------------- data memory: 1-cycle answer ----------------
  logic [31:0] dmem [int];
  always @(posedge clk) dmem_rvalid <= dmem_req && !dmem_rvalid;
  assign dmem_rdata = dmem.exists(dmem_addr) ? dmem[dmem_addr] : 32'd0;

  // ---------------- back end ----------------
  gate_cmd_t exp_q [$];
  int since = -1;
  int pend_q [$];
  function automatic bit outcome(int q);   // the "quantum chip": a fixed pseudo-random result
    return 1'(((q * 7) ^ (q >> 2)) & 1);
  endfunction
  always @(negedge clk) gate_ready = ($urandom_range(0, 9) != 0);
  always @(posedge clk) if (rst_n) begin
    if (q_valid && !q_ready) n_stall++;
    if (!dut.u_ts.in_ready) n_full++;
    if (gate_valid && gate_ready) begin
      gate_cmd_t e; int now;
      now = (since < 0) ? 0 : since / CPT;
      check(since >= 0, "gate before start");
      check(gate_cmd.cmd[0].ts <= 32'(now), "gate before its time stamp");
      check(gate_late == (gate_cmd.cmd[0].ts < 32'(now)), "late flag");
      for (int k = 0; k < LANES; k++) if (gate_cmd.valid[k]) begin
        if (gate_late) n_late++; else n_ontime++;
        if (exp_q.size() == 0) check(0, "unexpected gate");
        else begin
          e = exp_q.pop_front();
          check(gate_cmd.cmd[k] == e, $sformatf("lane %0d g%0d q%0d,%0d(%0b) ts%0d exp g%0d q%0d,%0d(%0b) ts%0d", k,
                gate_cmd.cmd[k].gate, gate_cmd.cmd[k].q0, gate_cmd.cmd[k].q1, gate_cmd.cmd[k].two_q, gate_cmd.cmd[k].ts,
                e.gate, e.q0, e.q1, e.two_q, e.ts));
        end
        if (gate_cmd.cmd[k].gate == 32'(G_MEAS) + 1) pend_q.push_back(int'(gate_cmd.cmd[k].q0));
      end
    end
    if (ts_start) since = 0; else if (since >= 0) since++;
  end
  always @(negedge clk) begin
    meas_valid = 0;
    if (pend_q.size() > 0) begin
      int q;
      q = pend_q.pop_front();
      meas_valid = 1; meas_qubit = 9'(q); meas_bit = outcome(q);
    end
  end

  // ---------------- host core ----------------
  int ts_m = 0;
  task automatic issue(input logic [31:0] inst, input logic [31:0] rs1 = 0, input logic [31:0] rs2 = 0);
    bit r;
    @(negedge clk);
    q_valid = 1; q_inst = inst; q_rs1 = rs1; q_rs2 = rs2;
    forever begin
      #1 r = q_ready;
      @(posedge clk); #1;
      if (r) break;
      @(negedge clk);
    end
    q_valid = 0;
  endtask

  function automatic gate_cmd_t mk(int g, bit two, int q0, int q1);
    gate_cmd_t c;
    c = '0; c.gate = 32'(g); c.two_q = two; c.q0 = 32'(q0); c.q1 = two ? 32'(q1) : 0; c.ts = 32'(ts_m);
    return c;
  endfunction

  // QUASAR encoders (field order as published, class 2'b00)
  function automatic logic [31:0] q_imm(qgate_e g, int q0, int q1 = 0);
    return {6'b0, 1'(q0 >> 8), 5'(q1 >> 4), 8'(q0), 1'b0, 4'(q1), 1'b0, g, 2'b00};
  endfunction
  function automatic logic [31:0] q_mask(qgate_e g, int win, int rs1, int rs2 = 2);
    return {6'b0, 1'(win >> 3), 5'(rs2), 5'(rs1), 3'(win), 5'b0, 1'b1, g, 2'b00};
  endfunction
  function automatic logic [31:0] tsi(int n);
    return {20'(n), 5'b0, 5'b01111, 2'b00};
  endfunction
  function automatic logic [31:0] qv(int opc, int v1, int v2, int v3);
    return {7'b0, 5'(v2), 5'(v1), 3'b0, 5'(v3), 5'(opc), 2'b01};
  endfunction

  task automatic mask_gate(qgate_e g, logic [31:0] m);
    for (int b = 0; b < N; b++) if (m[b]) begin exp_q.push_back(mk(int'(g) + 1, 0, b, 0)); n_mask++; end
    issue(q_mask(g, 0, 1), m);
  endtask
  task automatic imm_gate(qgate_e g, int q0, int q1 = 0);
    exp_q.push_back(mk(int'(g) + 1, g >= G_CNOT, q0, q1)); n_imm++;
    if (g >= G_CNOT) n_two++;
    issue(q_imm(g, q0, q1));
  endtask
  task automatic next_ts(int n = 1);
    ts_m += n; issue(tsi(n));
  endtask

  initial begin
    logic [31:0] all, rdm, expm;
    all = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the real-time clock starts after the FIFO has filled up
    fork
      begin repeat (150) @(posedge clk); @(negedge clk); ts_start = 1; @(negedge clk); ts_start = 0; end
    join_none
    // ---- 1. Grover's operator (Fig. "GO"), 32 qubits ----
    mask_gate(G_H, all);    next_ts();
    mask_gate(G_X180, all); next_ts();
    imm_gate(G_H, 0);       next_ts();
    for (int i = 1; i < N; i++) begin imm_gate(G_CNOT, i, 0); next_ts(); end
    imm_gate(G_H, 0);       next_ts();
    mask_gate(G_X180, all); next_ts();
    mask_gate(G_H, all);    next_ts();
    // ---- 2. two-qubit mask layer (controls = even qubits, targets = odd) and TSr ----
    for (int k = 0; k < 16; k++) begin exp_q.push_back(mk(int'(G_CZ) + 1, 1, 2 * k, 2 * k + 1)); n_two++; n_mask++; end
    issue(q_mask(G_CZ, 0, 1, 2), 32'h5555_5555, 32'hAAAA_AAAA);
    ts_m += 3; n_tsr++;
    issue({12'b0, 5'd1, 3'b0, 5'b0, 5'b11111, 2'b00}, 32'd3);
    // ---- 3. measure all, then feedback ----
    mask_gate(G_MEAS, all); next_ts();
    while (!(q_idle && pend_q.size() == 0 && exp_q.size() == 0)) @(posedge clk);
    repeat (3) @(posedge clk);
    @(negedge clk); meas_rd_win = 0; #1;
    rdm = meas_rd_data;
    expm = '0;
    for (int b = 0; b < N; b++) expm[b] = outcome(b);
    check(rdm == expm, "measurement window");
    check(meas_rd_done == all, "measurement done bits");
    mask_gate(G_X180, ~rdm); next_ts();   // flip every qubit that read 0
    n_feedback++;
    // ---- 4. qV: mixed gates (VQQG) and CZ pairs (VQQI) ----
    for (int e = 0; e < MVL; e++) begin
      dmem[32'h1000 + 4 * e] = (e % 5 == 3) ? 0 : e + 1;                 // v1: qubits, some NOP
      dmem[32'h2000 + 4 * e] = 0;                                        // v2: single-qubit
      dmem[32'h3000 + 4 * e] = (e % 7 == 6) ? 0 : 1 + (e % 9);           // v3: gates, some NOP
      dmem[32'h4000 + 4 * e] = (e < 16) ? 2 * e + 1 : 0;                 // v4: CZ controls
      dmem[32'h5000 + 4 * e] = (e < 16) ? 2 * e + 2 : 0;                 // v5: CZ targets
    end
    issue(qv(30, 0, 0, 1), 32'h1000); issue(qv(30, 0, 0, 2), 32'h2000); issue(qv(30, 0, 0, 3), 32'h3000);
    issue(qv(30, 0, 0, 4), 32'h4000); issue(qv(30, 0, 0, 5), 32'h5000);
    n_vld += 5;
    for (int e = 0; e < MVL; e++) begin
      int q, g;
      q = int'(dmem[32'h1000 + 4 * e]); g = int'(dmem[32'h3000 + 4 * e]);
      if (q != 0 && g != 0) exp_q.push_back(mk(g, 0, q - 1, 0)); else n_nop++;
    end
    issue(qv(31, 1, 2, 3)); n_vqqg++;
    next_ts();
    for (int e = 0; e < MVL; e++) begin
      int a, b;
      a = int'(dmem[32'h4000 + 4 * e]); b = int'(dmem[32'h5000 + 4 * e]);
      if (a != 0) exp_q.push_back(mk(int'(G_CZ) + 1, 1, a - 1, b - 1)); else n_nop++;
    end
    issue(qv(int'(G_CZ) + 1, 4, 5, 0)); n_vqqi++;
    next_ts();
    while (!(q_idle && exp_q.size() == 0)) @(posedge clk);
    repeat (5) @(posedge clk);
    check(late_count == 32'(n_late), "late_count");
    check(exp_q.size() == 0, "every gate delivered");
    $display("stall=%0d full=%0d late=%0d ontime=%0d imm=%0d mask=%0d two=%0d tsr=%0d vld=%0d vqqg=%0d vqqi=%0d nop=%0d feedback=%0d",
             n_stall, n_full, n_late, n_ontime, n_imm, n_mask, n_two, n_tsr, n_vld, n_vqqg, n_vqqi, n_nop, n_feedback);
    check(n_stall > 0, "host stall");     check(n_full > 0, "FIFO full");
    check(n_late > 0, "late gate");       check(n_ontime > 0, "on-time gate");
    check(n_imm > 0, "immediate gate");   check(n_mask > 0, "mask gate");
    check(n_two > 0, "two-qubit gate");   check(n_tsr > 0, "TSr");
    check(n_vld > 0, "vector load");      check(n_vqqg > 0, "VQQG");
    check(n_vqqi > 0, "VQQI");            check(n_nop > 0, "NOP element");
    check(n_feedback > 0, "feedback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
