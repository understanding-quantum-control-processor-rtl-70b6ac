// tb_sliding_mask: self-checking test of the sliding-mask qubit expander.
// Random masks (including all-zero and all-one) and windows are applied; the testbench
// lists the selected qubits itself (window*32 + bit, ascending) and checks that lane k
// carries the k-th of them, that exactly the first popcount lanes are valid, and the
// count output.
module tb_sliding_mask;
  logic [31:0] mask, valid;
  logic [3:0]  win;
  logic [8:0]  qid [32];
  logic [5:0]  count;
  int checks = 0, failures = 0;

  sliding_mask #(.MASK_W(32), .WIN_W(4)) dut (.mask, .win, .valid, .qid, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s mask=%h win=%0d", what, mask, win); end
  endtask

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int exp_ids [$];
      mask = (n == 0) ? 32'h0 : (n == 1) ? 32'hFFFF_FFFF : (n % 3 == 0) ? ($urandom & $urandom) : $urandom;
      win = 4'($urandom);
      exp_ids.delete();
      for (int b = 0; b < 32; b++) if (mask[b]) exp_ids.push_back(win * 32 + b);
      #1;
      check(count == 6'(exp_ids.size()), "count");
      for (int k = 0; k < 32; k++) begin
        check(valid[k] == (k < exp_ids.size()), $sformatf("valid lane %0d", k));
        if (k < exp_ids.size()) check(qid[k] == 9'(exp_ids[k]), $sformatf("lane %0d qid %0d exp %0d", k, qid[k], exp_ids[k]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
