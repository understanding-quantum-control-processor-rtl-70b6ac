// tb_ts_dispatch: self-checking test of the time-stamp timing controller at its default
// size (16-entry FIFO of 32-lane gate bundles, 4 cycles per time stamp). The testbench keeps its own real-time
// clock (posedges since `start` divided by 4) and its own copy of the FIFO, and checks:
// ts_now, that nothing leaves before start, that a bundle leaves only once its time
// stamp has come, in order, that `out_late` is set exactly when its time stamp has
// passed, late_count (in gates: valid lanes), and that in_ready drops when 16 bundles are waiting (overflow
// protection). Pushes and the back end's ready are random.
module tb_ts_dispatch;
  import quasar_pkg::*;
  localparam int CPT = 4, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic start = 0, in_valid = 0, in_ready, out_valid, out_ready = 0, out_late, empty;
  gate_bundle_t in_cmd, out_cmd;
  logic [31:0] ts_now, late_count;
  int checks = 0, failures = 0;
  int since = -1;          // posedges since the start edge, -1 = not running
  int late_model = 0, full_seen = 0, late_seen = 0, ontime_seen = 0;
  gate_bundle_t q [$];

  always #5 clk = ~clk;

  ts_dispatch #(.DEPTH(DEPTH), .CYCLES_PER_TS(CPT)) dut (.clk, .rst_n, .start, .in_valid, .in_ready, .in_cmd,
    .out_valid, .out_ready, .out_cmd, .out_late, .ts_now, .late_count, .empty);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (since=%0d)", what, since); end
  endtask

  // checks just before each clock edge, model update at the edge
  always @(posedge clk) if (rst_n) begin
    int now;
    now = (since < 0) ? 0 : since / CPT;
    check(ts_now == 32'(now), $sformatf("ts_now %0d vs %0d", ts_now, now));
    check(in_ready == (q.size() < DEPTH), "in_ready");
    if (q.size() == DEPTH) full_seen++;
    check(out_valid == (since >= 0 && q.size() > 0 && q[0].cmd[0].ts <= 32'(now)), "out_valid");
    if (out_valid) begin
      check(out_cmd == q[0], "order");
      check(out_late == (q[0].cmd[0].ts < 32'(now)), "late flag");
    end
    check(late_count == 32'(late_model), "late_count");
    if (out_valid && out_ready) begin
      if (out_late) begin late_model += $countones(q[0].valid); late_seen++; end else ontime_seen++;
      void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_cmd);
    if (start) since = 0; else if (since >= 0) since++;
  end

  logic [31:0] next_ts = 0;
  function automatic gate_bundle_t mkb(logic [31:0] ts);
    gate_bundle_t b;
    b = '0;
    b.valid = $urandom | 32'h1;
    for (int k = 0; k < LANES; k++) begin
      b.cmd[k].gate = $urandom_range(1, 16); b.cmd[k].q0 = $urandom_range(0, 511); b.cmd[k].ts = ts;
    end
    return b;
  endfunction
  initial begin
    in_cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill beyond capacity before the timeline starts
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      in_valid = 1; in_cmd = mkb(next_ts); if (n % 5 == 4) next_ts++;
    end
    @(negedge clk); in_valid = 0; start = 1;
    @(negedge clk); start = 0;
    for (int n = 0; n < 3000; n++) begin
      in_valid = ($urandom_range(0, 2) == 0);
      out_ready = ($urandom_range(0, 3) != 0);
      in_cmd = mkb(next_ts);
      if (in_valid && in_ready && $urandom_range(0, 2) == 0) next_ts++;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (400) @(negedge clk);
    check(empty && q.size() == 0, "drained");
    check(full_seen > 0, "FIFO full seen");
    check(late_seen > 0 && ontime_seen > 0, "late and on-time gates seen");
    $display("full=%0d late=%0d ontime=%0d", full_seen, late_seen, ontime_seen);
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
