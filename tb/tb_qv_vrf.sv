// tb_qv_vrf: self-checking test of the qV vector register file at its full size
// (32 registers x 32 elements x 32 bits). Every element is written with a value the
// testbench also keeps in its own array; then random triples of registers are read
// whole on the three read ports and compared with that copy, also in cycles where a
// write is pending (the read must still show the old value).
module tb_qv_vrf;
  logic clk = 0;
  logic we = 0;
  logic [4:0] waddr = 0, widx = 0;
  logic [31:0] wdata = 0;
  logic [4:0] raddr [3];
  logic [31:0] rdata [3][32];
  logic [31:0] model [32][32];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qv_vrf dut (.clk, .we, .waddr, .widx, .wdata, .raddr, .rdata);

  initial begin
    raddr = '{default: '0};
    for (int r = 0; r < 32; r++)
      for (int e = 0; e < 32; e++) begin
        @(negedge clk); we = 1; waddr = 5'(r); widx = 5'(e); wdata = $urandom; model[r][e] = wdata;
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      // a write and a read in the same cycle: read sees the old value
      if (n % 4 == 0) begin
        we = 1; waddr = 5'($urandom); widx = 5'($urandom); wdata = $urandom;
      end
      for (int p = 0; p < 3; p++) raddr[p] = 5'($urandom);
      #1;
      for (int p = 0; p < 3; p++) begin
        checks++;
        for (int e = 0; e < 32; e++)
          if (rdata[p][e] !== model[raddr[p]][e]) begin
            failures++; $display("FAIL port %0d reg %0d idx %0d", p, raddr[p], e); break;
          end
      end
      @(posedge clk);
      if (we) model[waddr][widx] = wdata;
      @(negedge clk); we = 0;
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
