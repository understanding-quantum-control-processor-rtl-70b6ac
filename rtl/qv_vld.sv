// qv_vld: the qV vector load (VLD vreg, gpr).
//
// Loads one vector register with MVL consecutive VES-bit words from data memory,
// starting at the byte address held in a general-purpose register (the paper's
// "LD gpr1, QUBIT_ADDR; VLD vreg1, gpr1"). The memory side is this design's own simple
// protocol: the unit raises mem_req with mem_addr and holds it until mem_rvalid returns
// the word (any latency of at least zero cycles after the request is seen; one request
// outstanding). Element i comes from address base + i*VES/8. `ready` is low from the
// cycle after `start` until the last element is written, so with a memory that answers
// in the cycle of the request a load takes MVL+1 cycles: the start cycle and one per
// element.
module qv_vld
  import quasar_pkg::*;
#(
  parameter int unsigned P_NVREG = NVREG,
  parameter int unsigned P_MVL   = MVL,
  parameter int unsigned P_VES   = VES,
  localparam int unsigned RA_W = $clog2(P_NVREG),
  localparam int unsigned EI_W = $clog2(P_MVL)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [RA_W-1:0]    vd,
  input  logic [31:0]        base,
  output logic               ready,
  // data memory
  output logic               mem_req,
  output logic [31:0]        mem_addr,
  input  logic               mem_rvalid,
  input  logic [P_VES-1:0]   mem_rdata,
  // vector register file write port
  output logic               vrf_we,
  output logic [RA_W-1:0]    vrf_waddr,
  output logic [EI_W-1:0]    vrf_widx,
  output logic [P_VES-1:0]   vrf_wdata
);

  logic            busy;
  logic [EI_W-1:0] idx;
  logic [31:0]     addr;

  assign ready     = !busy;
  assign mem_req   = busy;
  assign mem_addr  = addr;
  assign vrf_we    = busy && mem_rvalid;
  assign vrf_widx  = idx;
  assign vrf_wdata = mem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      idx       <= '0;
      addr      <= '0;
      vrf_waddr <= '0;
    end else if (!busy) begin
      if (start) begin
        busy      <= 1'b1;
        idx       <= '0;
        addr      <= base;
        vrf_waddr <= vd;
      end
    end else if (mem_rvalid) begin
      idx  <= idx + EI_W'(1);
      addr <= addr + 32'(P_VES / 8);
      if (idx == EI_W'(P_MVL - 1)) busy <= 1'b0;
    end
  end

endmodule
