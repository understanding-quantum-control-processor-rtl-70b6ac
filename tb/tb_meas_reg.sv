// tb_meas_reg: self-checking test of the measurement result register (512 qubits).
// Random measurement results are written; the testbench keeps its own result and done
// bits and compares every 32-qubit window (rd_data bit b = qubit win*32+b) after each
// write and after a clear.
module tb_meas_reg;
  logic clk = 0, rst_n = 0;
  logic clr = 0, meas_valid = 0, meas_bit = 0;
  logic [8:0] meas_qubit = 0;
  logic [3:0] rd_win = 0;
  logic [31:0] rd_data, rd_done;
  logic [511:0] res_m = '0, done_m = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  meas_reg dut (.clk, .rst_n, .clr, .meas_valid, .meas_qubit, .meas_bit, .rd_win, .rd_data, .rd_done);

  task automatic compare_all();
    for (int w = 0; w < 16; w++) begin
      rd_win = 4'(w); #1;
      checks++;
      if (rd_data != res_m[w*32 +: 32] || rd_done != done_m[w*32 +: 32]) begin
        failures++; $display("FAIL window %0d: %h/%h exp %h/%h", w, rd_data, rd_done, res_m[w*32 +: 32], done_m[w*32 +: 32]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      meas_valid = ($urandom_range(0, 3) != 0); meas_qubit = 9'($urandom); meas_bit = 1'($urandom);
      clr = (n == 700);
      @(posedge clk);
      if (clr) begin res_m = '0; done_m = '0; end
      else if (meas_valid) begin res_m[meas_qubit] = meas_bit; done_m[meas_qubit] = 1'b1; end
      @(negedge clk); meas_valid = 0; clr = 0;
      if (n % 10 == 0 || n == 700) compare_all();
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
