// qv_vrf: the qV vector register file.
//
// NVREG vector registers of MVL elements, VES bits each. An element holds a qubit index
// (counted from 1, 0 = no operation) or a gate type (0 = no operation). The paper's
// evaluation point is 32 elements of 32 bits, i.e. 128 bytes per register; 32 registers
// follow from the 5-bit register specifiers of its VQQI/VQQG encodings.
// Ports (this design's own choice): one element write port used by vector loads, and
// three whole-register read ports, so that VQQG can read qubit0, qubit1 and gate lists
// of all elements in the same cycle. Reads are combinational; a write takes effect at
// the clock edge. As a memory it has no reset: registers are defined once loaded.
module qv_vrf
  import quasar_pkg::*;
#(
  parameter int unsigned P_NVREG = NVREG,
  parameter int unsigned P_MVL   = MVL,
  parameter int unsigned P_VES   = VES,
  localparam int unsigned RA_W = $clog2(P_NVREG),
  localparam int unsigned EI_W = $clog2(P_MVL)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [RA_W-1:0]      waddr,
  input  logic [EI_W-1:0]      widx,
  input  logic [P_VES-1:0]     wdata,
  input  logic [RA_W-1:0]      raddr [3],
  output logic [P_VES-1:0]     rdata [3][P_MVL]
);

  logic [P_VES-1:0] mem [P_NVREG][P_MVL];

  always_ff @(posedge clk)
    if (we) mem[waddr][widx] <= wdata;

  always_comb
    for (int p = 0; p < 3; p++)
      for (int e = 0; e < int'(P_MVL); e++) rdata[p][e] = mem[raddr[p]][e];

endmodule
