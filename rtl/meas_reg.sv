// meas_reg: measurement result register, the processor's direct view of quantum data.
//
// The paper's case for QUASAR over eQASM in measurement-dependent feedback is that the
// core reads measured qubit values directly and works on them with ordinary RV32 logic
// and shift instructions, producing masks for mask-mode gates. This block holds one
// result bit per qubit, written by the readout back end (meas_valid with the qubit ID
// and the bit), and returns 32 results at a time, the same window of 32 qubits that a
// sliding-mask operand addresses: rd_data bit b is qubit rd_win*32 + b. A `done` bit
// per qubit records that a result has arrived since the last clear; rd_done returns
// them for the same window. Layout, clear and read timing (combinational read, write at
// the clock edge, clear wins over a write in the same cycle) are this design's own.
module meas_reg
  import quasar_pkg::*;
#(
  parameter int unsigned P_NUM_QUBITS = NUM_QUBITS,
  localparam int unsigned QW = $clog2(P_NUM_QUBITS),
  localparam int unsigned RW = $clog2(P_NUM_QUBITS / 32)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          meas_valid,
  input  logic [QW-1:0] meas_qubit,
  input  logic          meas_bit,
  input  logic [RW-1:0] rd_win,
  output logic [31:0]   rd_data,
  output logic [31:0]   rd_done
);

  logic [P_NUM_QUBITS-1:0] result, done;

  assign rd_data = result[rd_win*32 +: 32];
  assign rd_done = done[rd_win*32 +: 32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result <= '0;
      done   <= '0;
    end else if (clr) begin
      result <= '0;
      done   <= '0;
    end else if (meas_valid) begin
      result[meas_qubit] <= meas_bit;
      done[meas_qubit]   <= 1'b1;
    end
  end

endmodule
