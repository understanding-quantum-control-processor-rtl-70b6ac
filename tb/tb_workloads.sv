// tb_workloads: runs the circuits the design is meant for through qcu_top at its default
// parameters and reports how fast gates are delivered against the 20 ns time stamp.
//   QFT on 32 qubits: H on qubit j, then for every k > j a controlled rotation R(k->j)
//     decomposed as Rz(j), CNOT(k,j), Rz(j), CNOT(k,j), Rz(k), one time stamp each;
//     all in immediate addressing. Gate count n + 5*n*(n-1)/2 = 2512.
//   Grover's operator on 32 qubits: H, X layers in mask mode, H(0), CNOT(i,0) for
//     i = 1..31, H(0), X and H layers. Gate count 4*32 + 2 + 31 = 161.
//   Synthetic single time stamps on 32 qubits, density d/32 for d = 1,2,4,8,16,32:
//     (a) d different gate types, immediate mode, one instruction per gate;
//     (b) one gate type in mask mode, one instruction for all d gates;
//     (c) d different gate types in qV: one VQQG over vector registers that were loaded
//         (VLD) before the real-time clock starts, elements past d being NOPs.
//   Two-qubit time stamps, d = 1..16 CZ pairs: immediate (one instruction per pair),
//     mask (rs1/rs2 masks, one instruction) and qV (one VQQI).
// Program size is reported as 4 bytes per instruction, plus the bytes of vector data
// the VLDs read.
// Each synthetic time stamp is repeated S = 16 times, so that the cycles per time
// stamp show the sustained rate.
// Every delivered gate is compared, in order, with the list the testbench builds while
// writing the program, and the gate counts with the formulas above. The real-time
// clock is started with the first instruction; the testbench prints, per workload, the
// cycles taken and the late gates (the back end is always ready). The host issues one
// instruction per cycle whenever q_ready allows. Late gates are reported, not failed:
// they show where one instruction per cycle is not enough for a 4-cycle time stamp.
// Follows the paper: the circuits (QFT, Grover's operator, synthetic density sweeps on
// 32 qubits) and the 20 ns time stamp at 200 MHz. Own choices: the QFT rotation
// decomposition, the gate types used and the layer order of Grover's operator.
module tb_workloads;
  import quasar_pkg::*;
  localparam int N = 32;
  localparam int S = 16;     // time stamps per synthetic run

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
  int checks = 0, failures = 0, cycles = 0, delivered = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  qcu_top dut (.*);

  // data memory for VLD: answers every request one cycle later
  logic [31:0] dmem [int];
  always @(posedge clk) dmem_rvalid <= dmem_req && !dmem_rvalid;
  assign dmem_rdata = dmem.exists(dmem_addr) ? dmem[dmem_addr] : 32'd0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  gate_cmd_t exp_q [$];
  int late_stamps = 0;
  always @(posedge clk) if (rst_n && gate_valid && gate_ready) begin
    gate_cmd_t e;
    for (int k = 0; k < LANES; k++) if (gate_cmd.valid[k]) begin
      delivered++;
      if (exp_q.size() == 0) check(0, "unexpected gate");
      else begin
        e = exp_q.pop_front();
        check(gate_cmd.cmd[k] == e, $sformatf("gate g%0d q%0d,%0d ts%0d exp g%0d q%0d,%0d ts%0d",
              gate_cmd.cmd[k].gate, gate_cmd.cmd[k].q0, gate_cmd.cmd[k].q1, gate_cmd.cmd[k].ts, e.gate, e.q0, e.q1, e.ts));
      end
    end
  end

  int ts_m = 0, n_inst = 0, n_data = 0;
  task automatic issue(input logic [31:0] inst, input logic [31:0] rs1 = 0, input logic [31:0] rs2 = 0);
    bit r;
    n_inst++;
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
    c = '0; c.gate = 32'(g + 1); c.two_q = two; c.q0 = 32'(q0); c.q1 = two ? 32'(q1) : 0; c.ts = 32'(ts_m);
    return c;
  endfunction
  task automatic imm(qgate_e g, int q0, int q1 = 0);
    exp_q.push_back(mk(int'(g), g >= G_CNOT, q0, q1));
    issue({6'b0, 1'(q0 >> 8), 5'(q1 >> 4), 8'(q0), 1'b0, 4'(q1), 1'b0, g, 2'b00});
  endtask
  task automatic msk(qgate_e g, logic [31:0] m);
    for (int b = 0; b < N; b++) if (m[b]) exp_q.push_back(mk(int'(g), 0, b, 0));
    issue({6'b0, 1'b0, 5'd0, 5'd1, 3'd0, 5'b0, 1'b1, g, 2'b00}, m);
  endtask
  task automatic msk2(qgate_e g, logic [31:0] m1, logic [31:0] m2);
    int a [$], b [$];
    for (int i = 0; i < N; i++) begin if (m1[i]) a.push_back(i); if (m2[i]) b.push_back(i); end
    foreach (a[k]) exp_q.push_back(mk(int'(g), 1, a[k], b[k]));
    issue({6'b0, 1'b0, 5'd2, 5'd1, 3'd0, 5'b0, 1'b1, g, 2'b00}, m1, m2);
  endtask
  // qV: VLD vd <- MVL words at base; VQQG/VQQI over vr1, vr2 (vr3 = gate list for VQQG)
  task automatic vld(int vd, int base, int vals [MVL]);
    for (int e = 0; e < MVL; e++) dmem[base + 4 * e] = 32'(vals[e]);
    n_data += 4 * MVL;
    issue({7'b0, 5'd0, 5'd1, 3'b0, 5'(vd), QV_VLD, 2'b01}, 32'(base));
  endtask
  task automatic vqq(int opc, int v1, int v2, int v3, int q0 [MVL], int q1 [MVL], int gv [MVL]);
    for (int e = 0; e < MVL; e++) begin
      int g;
      g = (opc == int'(QV_VQQG)) ? gv[e] : opc;
      if (q0[e] != 0 && g != 0) exp_q.push_back(mk(g - 1, q1[e] != 0, q0[e] - 1, q1[e] - 1));
    end
    issue({7'b0, 5'(v2), 5'(v1), 3'b0, 5'(v3), 5'(opc), 2'b01});
  endtask
  task automatic tsi();
    ts_m++; issue({20'd1, 5'b0, 5'b01111, 2'b00});
  endtask

  // run one workload from a fresh reset; returns nothing, prints the figures
  int t0, l0, d0;
  task automatic reset_wl();
    rst_n = 0; ts_m = 0; n_inst = 0; n_data = 0; repeat (2) @(posedge clk); rst_n = 1;
  endtask
  // the real-time clock starts one cycle before the next instruction is offered
  task automatic start_ts();
    while (!q_idle) @(posedge clk);
    @(negedge clk); ts_start = 1; t0 = cycles; d0 = delivered;
    fork begin @(negedge clk); ts_start = 0; end join_none
  endtask
  task automatic begin_wl();
    reset_wl(); start_ts();
  endtask
  task automatic end_wl(input string name, input int exp_gates, input int stamps);
    while (!(q_idle && exp_q.size() == 0)) @(posedge clk);
    @(negedge clk);
    check(delivered - d0 == exp_gates, $sformatf("%s gate count %0d vs %0d", name, delivered - d0, exp_gates));
    $display("%-30s gates=%5d stamps=%5d cycles=%6d cycles/stamp=%0.2f late=%0d program=%0d B (+%0d B data)",
             name, delivered - d0, stamps, cycles - t0, real'(cycles - t0) / real'(stamps), late_count,
             4 * n_inst, n_data);
  endtask

  initial begin
    // ---------------- QFT ----------------
    begin_wl();
    for (int j = 0; j < N; j++) begin
      imm(G_H, j); tsi();
      for (int k = j + 1; k < N; k++) begin
        imm(G_RZ, j); tsi(); imm(G_CNOT, k, j); tsi(); imm(G_RZ, j); tsi();
        imm(G_CNOT, k, j); tsi(); imm(G_RZ, k); tsi();
      end
    end
    end_wl("QFT-32 (immediate)", N + 5 * N * (N - 1) / 2, ts_m);
    // ---------------- Grover's operator ----------------
    begin_wl();
    msk(G_H, '1); tsi(); msk(G_X180, '1); tsi(); imm(G_H, 0); tsi();
    for (int i = 1; i < N; i++) begin imm(G_CNOT, i, 0); tsi(); end
    imm(G_H, 0); tsi(); msk(G_X180, '1); tsi(); msk(G_H, '1); tsi();
    end_wl("GO-32 (mask + immediate)", 4 * N + 2 + (N - 1), ts_m);
    // ---------------- synthetic time stamps ----------------
    for (int d = 1; d <= N; d *= 2) begin
      logic [31:0] m;
      begin_wl();
      for (int t = 0; t < S; t++) begin
        for (int i = 0; i < d; i++) imm(qgate_e'(i % 12), i * (N / d));
        tsi();
      end
      end_wl($sformatf("density %0d/32, %0d types imm", d, (d < 12) ? d : 12), d * S, S);
      begin_wl();
      m = '0; for (int i = 0; i < d; i++) m[i * (N / d)] = 1'b1;
      for (int t = 0; t < S; t++) begin msk(G_X90, m); tsi(); end
      end_wl($sformatf("density %0d/32, 1 type mask", d), d * S, S);
    end
    // ---------------- qV: d gates of d different types in one time stamp ----------------
    // The lists are loaded before the real-time clock starts (VLD takes MVL+1 cycles).
    for (int d = 1; d <= N; d *= 2) begin
      int q0 [MVL], z [MVL], gv [MVL];
      reset_wl();
      for (int e = 0; e < MVL; e++) begin
        q0[e] = (e < d) ? e * (N / d) + 1 : 0;     // qubit index + 1; 0 = NOP
        z[e]  = 0;                                  // no second qubit
        gv[e] = (e < d) ? e + 1 : 0;                // d different gate codes
      end
      vld(1, 32'h1000, q0); vld(2, 32'h2000, z); vld(3, 32'h3000, gv);
      start_ts();
      for (int t = 0; t < S; t++) begin vqq(int'(QV_VQQG), 1, 2, 3, q0, z, gv); tsi(); end
      end_wl($sformatf("density %0d/32, %0d types VQQG", d, d), d * S, S);
    end
    // ---------------- two-qubit time stamps: d CZ pairs ----------------
    for (int d = 1; d <= N / 2; d *= 2) begin
      logic [31:0] m1, m2;
      int a [MVL], b [MVL], z [MVL];
      begin_wl();
      for (int t = 0; t < S; t++) begin
        for (int i = 0; i < d; i++) imm(G_CZ, 2 * i * (N / 2 / d), 2 * i * (N / 2 / d) + 1);
        tsi();
      end
      end_wl($sformatf("2q density %0d pairs, imm", d), d * S, S);
      begin_wl();
      m1 = '0; m2 = '0;
      for (int i = 0; i < d; i++) begin m1[2 * i * (N / 2 / d)] = 1'b1; m2[2 * i * (N / 2 / d) + 1] = 1'b1; end
      for (int t = 0; t < S; t++) begin msk2(G_CZ, m1, m2); tsi(); end
      end_wl($sformatf("2q density %0d pairs, mask", d), d * S, S);
      reset_wl();
      for (int e = 0; e < MVL; e++) begin
        a[e] = (e < d) ? 2 * e * (N / 2 / d) + 1 : 0;
        b[e] = (e < d) ? 2 * e * (N / 2 / d) + 2 : 0;
        z[e] = 0;
      end
      vld(4, 32'h4000, a); vld(5, 32'h5000, b);
      start_ts();
      for (int t = 0; t < S; t++) begin vqq(int'(G_CZ) + 1, 4, 5, 0, a, b, z); tsi(); end
      end_wl($sformatf("2q density %0d pairs, VQQI", d), d * S, S);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
