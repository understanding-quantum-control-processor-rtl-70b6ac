// tb_qv_unit: self-checking test of the qV VQQI/VQQG execution unit at full size
// (MVL 32, VES 32) with the vector register file. The testbench fills registers with
// qubit-index lists (about a quarter of them 0 = NOP, indices from 1) and gate lists
// (some 0 = NOP), then runs VQQI and VQQG and predicts each command itself:
// gate = opcode (VQQI) or vr3[i] (VQQG); qubits vr1[i]-1 and, if vr2[i] != 0, vr2[i]-1;
// NOP elements produce nothing. Gates arrive as one bundle per instruction with element
// i in lane i. With the output always ready, instructions are issued back to back and
// each must be taken in one cycle, its bundle valid in the next; later the output is
// randomly not ready.
// A second unit with its own register file runs at MVL = 64, twice the lane count
// (a parameter the paper does not vary; it checks the multi-beat path): every
// instruction leaves as two bundles, elements 0..31 then 32..63, and the unit is busy
// for the second cycle.
module tb_qv_unit;
  import quasar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, ready, cmd_valid, cmd_ready = 1;
  logic [31:0] inst = 0;
  dec_t dec;
  gate_bundle_t cmd;
  logic [31:0] ts_issue = 0;
  logic we = 0;
  logic [4:0] waddr = 0, widx = 0;
  logic [31:0] wdata = 0;
  logic [4:0] raddr [3];
  logic [31:0] rdata [3][32];
  logic [31:0] model [32][32];
  int checks = 0, failures = 0, cycles = 0;
  bit random_ready = 0;

  // second instance: MVL = 2 * LANES
  localparam int M2 = 64;
  logic start2 = 0, ready2, cmd2_valid, cmd2_ready = 1;
  gate_bundle_t cmd2;
  logic we2 = 0;
  logic [4:0] waddr2 = 0;
  logic [5:0] widx2 = 0;
  logic [31:0] wdata2 = 0;
  logic [4:0] raddr2 [3];
  logic [31:0] rdata2 [3][M2];
  logic [31:0] model2 [32][M2];
  gate_cmd_t exp_q2 [$];
  int beats2 = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  qcu_decoder u_dec (.inst, .dec);
  qv_vrf u_vrf (.clk, .we, .waddr, .widx, .wdata, .raddr, .rdata);
  qv_unit dut (.clk, .rst_n, .start, .dec, .ts_issue, .ready, .vrf_raddr(raddr),
               .vrf_rdata(rdata), .out_valid(cmd_valid), .out_ready(cmd_ready), .out(cmd));

  qv_vrf #(.P_MVL(M2)) u_vrf2 (.clk, .we(we2), .waddr(waddr2), .widx(widx2), .wdata(wdata2),
                                .raddr(raddr2), .rdata(rdata2));
  qv_unit #(.P_MVL(M2)) dut2 (.clk, .rst_n, .start(start2), .dec, .ts_issue, .ready(ready2),
                              .vrf_raddr(raddr2), .vrf_rdata(rdata2), .out_valid(cmd2_valid),
                              .out_ready(cmd2_ready), .out(cmd2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  gate_cmd_t exp_q [$];
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    gate_cmd_t e;
    for (int k = 0; k < LANES; k++) if (cmd.valid[k]) begin
      if (exp_q.size() == 0) check(0, "unexpected command");
      else begin
        e = exp_q.pop_front();
        check(cmd.cmd[k] == e, $sformatf("lane %0d got g%0d q%0d,%0d(%0b) exp g%0d q%0d,%0d(%0b)", k,
              cmd.cmd[k].gate, cmd.cmd[k].q0, cmd.cmd[k].q1, cmd.cmd[k].two_q, e.gate, e.q0, e.q1, e.two_q));
      end
    end
  end
  always @(posedge clk) if (rst_n && cmd2_valid && cmd2_ready) begin
    gate_cmd_t e;
    beats2++;
    for (int k = 0; k < LANES; k++) if (cmd2.valid[k]) begin
      if (exp_q2.size() == 0) check(0, "MVL64: unexpected command");
      else begin
        e = exp_q2.pop_front();
        check(cmd2.cmd[k] == e, $sformatf("MVL64 lane %0d got g%0d q%0d exp g%0d q%0d", k,
              cmd2.cmd[k].gate, cmd2.cmd[k].q0, e.gate, e.q0));
      end
    end
  end
  always @(negedge clk) if (random_ready) cmd_ready = ($urandom_range(0, 2) != 0);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 32; r++)
      for (int e = 0; e < 32; e++) begin
        @(negedge clk); we = 1; waddr = 5'(r); widx = 5'(e);
        // registers 0..15: qubit lists; 16..31: gate lists
        if (r < 16) wdata = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, 512);
        else        wdata = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(1, 40);
        model[r][e] = wdata;
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      int v1, v2, v3, op, t0;
      bit mimd;
      if (n == 100) random_ready = 1;
      mimd = $urandom_range(0, 1);
      v1 = $urandom_range(0, 15); v2 = $urandom_range(0, 15); v3 = $urandom_range(16, 31);
      op = mimd ? 31 : $urandom_range(1, 29);
      inst = {7'b0, 5'(v2), 5'(v1), 3'b0, 5'(v3), 5'(op), 2'b01};
      ts_issue = $urandom;
      for (int e = 0; e < 32; e++) begin
        gate_cmd_t c; logic [31:0] g;
        g = mimd ? model[v3][e] : 32'(op);
        if (model[v1][e] != 0 && g != 0) begin
          c = '0; c.gate = g; c.two_q = (model[v2][e] != 0);
          c.q0 = model[v1][e] - 1; c.q1 = c.two_q ? model[v2][e] - 1 : 0; c.ts = ts_issue;
          exp_q.push_back(c);
        end
      end
      begin
        bit r; int took;
        @(negedge clk); start = 1; took = 0;
        forever begin
          #1 r = ready;
          @(posedge clk); took++; #1;
          if (r) break;
          @(negedge clk);
        end
        start = 0;
        if (!random_ready) begin
          check(took == 1, "taken in one cycle");
          check(cmd_valid == (exp_q.size() > 0), "bundle valid the cycle after");
        end
      end
      // the bundle leaves before the next instruction's expectations are added
      while (cmd_valid) @(posedge clk);
      #1;
      check(exp_q.size() == 0, "all commands of the instruction seen");
      exp_q.delete();
    end
    // ---------------- MVL = 64: two bundles per instruction ----------------
    random_ready = 0; cmd_ready = 1;
    for (int r = 0; r < 32; r++)
      for (int e = 0; e < M2; e++) begin
        @(negedge clk); we2 = 1; waddr2 = 5'(r); widx2 = 6'(e);
        if (r < 16) wdata2 = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, 512);
        else        wdata2 = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(1, 40);
        model2[r][e] = wdata2;
      end
    @(negedge clk); we2 = 0;
    for (int n = 0; n < 100; n++) begin
      int v1, v2, v3, op, b0;
      bit mimd;
      mimd = $urandom_range(0, 1);
      v1 = $urandom_range(0, 15); v2 = $urandom_range(0, 15); v3 = $urandom_range(16, 31);
      op = mimd ? 31 : $urandom_range(1, 29);
      inst = {7'b0, 5'(v2), 5'(v1), 3'b0, 5'(v3), 5'(op), 2'b01};
      ts_issue = $urandom;
      for (int e = 0; e < M2; e++) begin
        gate_cmd_t c; logic [31:0] g;
        g = mimd ? model2[v3][e] : 32'(op);
        if (model2[v1][e] != 0 && g != 0) begin
          c = '0; c.gate = g; c.two_q = (model2[v2][e] != 0);
          c.q0 = model2[v1][e] - 1; c.q1 = c.two_q ? model2[v2][e] - 1 : 0; c.ts = ts_issue;
          exp_q2.push_back(c);
        end
      end
      b0 = beats2;
      @(negedge clk);
      check(ready2, "MVL64: ready when idle");
      start2 = 1;
      @(posedge clk); #1; start2 = 0;
      check(!ready2, "MVL64: busy for the second beat");
      @(posedge clk); #1;
      check(ready2, "MVL64: ready again after two beats");
      @(posedge clk); #1;
      check(exp_q2.size() == 0, "MVL64: all commands of the instruction seen");
      check(beats2 - b0 <= 2 && beats2 - b0 >= 1, "MVL64: at most two bundles");
      exp_q2.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
