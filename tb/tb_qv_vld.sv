// tb_qv_vld: self-checking test of the qV vector load unit at its full size (MVL 32,
// VES 32) together with the vector register file. A memory model in the testbench
// answers requests after a random delay (0..3 cycles, 0 in the first loads). The test
// loads random registers from random base addresses and checks every element against
// the memory image, the addresses requested (base + 4*i), and, with a zero-latency
// memory, the load time of MVL+1 cycles (the start cycle plus one per element).
module tb_qv_vld;
  import quasar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, ready;
  logic [4:0] vd = 0;
  logic [31:0] base = 0;
  logic mem_req, mem_rvalid;
  logic [31:0] mem_addr, mem_rdata;
  logic vrf_we;
  logic [4:0] vrf_waddr, vrf_widx;
  logic [31:0] vrf_wdata;
  logic [4:0] raddr [3];
  logic [31:0] rdata [3][32];
  int checks = 0, failures = 0, cycles = 0;
  int delay = 0, wait_cnt = 0;
  bit random_delay = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  qv_vld dut (.clk, .rst_n, .start, .vd, .base, .ready, .mem_req, .mem_addr, .mem_rvalid, .mem_rdata,
              .vrf_we, .vrf_waddr, .vrf_widx, .vrf_wdata);
  qv_vrf u_vrf (.clk, .we(vrf_we), .waddr(vrf_waddr), .widx(vrf_widx), .wdata(vrf_wdata),
                .raddr, .rdata);

  // memory: word at byte address a holds a hash of a
  function automatic logic [31:0] memval(logic [31:0] a);
    return (a * 32'h9E37_79B1) ^ 32'h5A5A_1234;
  endfunction

  logic [31:0] exp_addr;
  assign mem_rvalid = mem_req && (wait_cnt >= delay);
  assign mem_rdata  = memval(mem_addr);
  always @(posedge clk) begin
    if (mem_req && !mem_rvalid) wait_cnt <= wait_cnt + 1;
    if (mem_rvalid) begin
      checks++;
      if (mem_addr != exp_addr) begin failures++; $display("FAIL address %h exp %h", mem_addr, exp_addr); end
      exp_addr <= exp_addr + 4;
      wait_cnt <= 0;
      delay <= random_delay ? $urandom_range(0, 3) : 0;
    end
  end

  initial begin
    raddr = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int t0;
      random_delay = (n >= 10);
      @(negedge clk);
      vd = 5'($urandom); base = $urandom & 32'hFFFF_FFFC; exp_addr = base; start = 1; t0 = cycles;
      @(negedge clk); start = 0;
      while (!ready) @(negedge clk);
      if (!random_delay) begin
        checks++;
        if (cycles - t0 != MVL + 1) begin failures++; $display("FAIL load took %0d", cycles - t0); end
      end
      raddr[0] = vd;
      for (int e = 0; e < MVL; e++) begin
        #1;
        checks++;
        if (rdata[0][e] != memval(base + 32'(4 * e))) begin failures++; $display("FAIL vd %0d elem %0d", vd, e); end
      end
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
