// tb_quasar_unit: self-checking test of the QUASAR execution unit.
// Random QUASAR instructions (immediate and mask addressing, single- and two-qubit
// gates, TSi and TSr) are assembled, decoded by qcu_decoder and executed. The testbench
// predicts every gate command itself (gate+1, qubits, time stamp; k-th set bit of rs1
// paired with k-th set bit of rs2 for two-qubit mask gates) and compares them in order.
// Gates arrive as bundles; lane k of a mask gate must be the k-th selected qubit. In a
// first phase with the output always ready the host side issues back to back and the
// test checks that every instruction is taken in one cycle and that each gate
// instruction's bundle appears the cycle after it was taken.
module tb_quasar_unit;
  import quasar_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0, ready, cmd_valid, cmd_ready = 1;
  int last_take = -10, bundles = 0;
  logic [31:0] inst = 0, rs1 = 0, rs2 = 0;
  dec_t dec;
  gate_bundle_t cmd;
  logic [TS_W-1:0] ts_issue;
  int checks = 0, failures = 0;
  int cycles = 0;
  bit random_ready = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  qcu_decoder u_dec (.inst, .dec);
  quasar_unit dut (.clk, .rst_n, .start, .dec, .rs1_val(rs1), .rs2_val(rs2), .ready,
                   .out_valid(cmd_valid), .out_ready(cmd_ready), .out(cmd), .ts_issue);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  gate_cmd_t exp_q [$];
  logic [31:0] ts_model = 0;

  // monitor: compare every command taken
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    gate_cmd_t e;
    bundles++;
    for (int k = 0; k < LANES; k++) if (cmd.valid[k]) begin
      if (exp_q.size() == 0) check(0, "unexpected command");
      else begin
        e = exp_q.pop_front();
        check(cmd.cmd[k] == e, $sformatf("lane %0d got g%0d q%0d,%0d ts%0d exp g%0d q%0d,%0d ts%0d", k,
              cmd.cmd[k].gate, cmd.cmd[k].q0, cmd.cmd[k].q1, cmd.cmd[k].ts, e.gate, e.q0, e.q1, e.ts));
      end
    end
  end
  always @(negedge clk) if (random_ready) cmd_ready = ($urandom_range(0, 2) != 0);

  function automatic gate_cmd_t mk(int g, bit two, int q0, int q1, logic [31:0] ts);
    gate_cmd_t c;
    c = '0; c.gate = 32'(g + 1); c.two_q = two; c.q0 = 32'(q0); c.q1 = two ? 32'(q1) : 0; c.ts = ts;
    return c;
  endfunction

  // issue one instruction; return the number of clock edges until it was taken
  task automatic run(output int took);
    bit r;
    @(negedge clk);
    start = 1; took = 0;
    forever begin
      #1 r = ready;
      @(posedge clk); took++; #1;
      if (r) break;
      @(negedge clk);
    end
    start = 0;
  endtask

  task automatic one(input int kind, input bit timed);
    int g, q0, q1, took, k; logic [3:0] w; int la [$]; int lb [$];
    g = (kind % 2 == 0) ? $urandom_range(0, 11) : $urandom_range(12, 14);
    q0 = $urandom_range(0, 511); q1 = $urandom_range(0, 511);
    w = 4'($urandom); rs1 = $urandom & $urandom; rs2 = $urandom;
    if (kind < 2) begin             // immediate
      inst = {6'b0, 1'(q0 >> 8), 5'(q1 >> 4), 8'(q0), 1'b0, 4'(q1), 1'b0, 4'(g), 2'b00};
      exp_q.push_back(mk(g, g >= 12, q0, q1, ts_model));
      run(took);
      if (timed) check(took == 1, "immediate gate taken in one cycle");
    end else if (kind < 4) begin    // mask
      inst = {6'b0, w[3], 5'd2, 5'd1, w[2:0], 5'b0, 1'b1, 4'(g), 2'b00};
      for (int b = 0; b < 32; b++) begin
        if (rs1[b]) la.push_back(w * 32 + b);
        if (rs2[b]) lb.push_back(w * 32 + b);
      end
      k = (g >= 12) ? ((la.size() < lb.size()) ? la.size() : lb.size()) : la.size();
      for (int i = 0; i < k; i++) exp_q.push_back(mk(g, g >= 12, la[i], (g >= 12) ? lb[i] : 0, ts_model));
      run(took);
      if (timed) check(took == 1, $sformatf("mask gate taken in %0d cycles", took));
    end else begin                  // time stamp
      int a;
      a = $urandom_range(1, 5);
      if (kind == 4) inst = {20'(a), 5'b0, 5'b01111, 2'b00};
      else begin inst = {12'b0, 5'd3, 3'b0, 5'b0, 5'b11111, 2'b00}; rs1 = 32'(a); end
      ts_model += 32'(a);
      run(took);
      if (timed) check(took == 1, "time-stamp taken in one cycle");
      #1 check(ts_issue == ts_model, $sformatf("ts_issue %0d vs %0d kind %0d", ts_issue, ts_model, kind));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) one($urandom_range(0, 5), 1);
    check(bundles > 200, "bundles delivered");
    @(negedge clk);
    // bundle appears the cycle after the instruction is taken
    inst = {6'b0, 1'b0, 5'd0, 8'd77, 1'b0, 4'd0, 1'b0, 4'(G_X90), 2'b00};
    exp_q.push_back(mk(int'(G_X90), 0, 77, 0, ts_model));
    start = 1; @(posedge clk); #1 start = 0;
    check(cmd_valid, "bundle valid one cycle after start");
    @(posedge clk); #1;
    @(negedge clk);
    random_ready = 1;
    for (int n = 0; n < 300; n++) one($urandom_range(0, 5), 0);
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "all commands seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
