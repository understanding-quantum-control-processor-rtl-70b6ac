// quasar_unit: executes QUASAR gate and time-stamp instructions, one per cycle.
//
// The unit takes a decoded QUASAR instruction (`start` while `ready`) with the values of
// its source registers rs1/rs2 as read by the host core, and turns it into one gate
// bundle tagged with the current issue time stamp:
//   immediate gate : one gate in lane 0, qubit(s) from the 9-bit immediates.
//   mask gate      : one gate per set bit of rs1 in the chosen window (sliding mask),
//                    all in the same bundle, lowest qubit in lane 0. For a two-qubit
//                    gate rs2 holds the second mask and the k-th set bit of rs1 is
//                    paired with the k-th set bit of rs2; pairing stops when either
//                    mask runs out. This pairing rule is this design's own.
//   TSi / TSr      : add the immediate / rs1 to the issue time stamp, closing the
//                    current time stamp; later gates belong to the next one.
// Addressing modes, 512 qubits, 15 gates and two timing instructions are the paper's.
// Timing: the bundle is registered and offered (out_valid) the cycle after `start`;
// `ready` stays high while the output register is free or being emptied, so with
// out_ready high the unit executes one instruction per cycle, the rate the paper's
// timing analysis assumes. A mask of all zeros produces no bundle. Gates leave as
// number+1 (0 is NOP in the common gate space). The bundle's gate and qubit fields are
// 32 bits wide because qV shares them; here only the low 4 and 9 bits can be non-zero,
// and the upper bits are constant zero.
module quasar_unit
  import quasar_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  dec_t              dec,
  input  logic [31:0]       rs1_val,
  input  logic [31:0]       rs2_val,
  output logic              ready,
  output logic              out_valid,
  input  logic              out_ready,
  output gate_bundle_t      out,
  output logic [TS_W-1:0]   ts_issue
);

  localparam int unsigned ID_W = WIN_W + $clog2(MASK_W);

  logic [MASK_W-1:0] a_valid, b_valid;
  logic [ID_W-1:0]   a_qid [MASK_W];
  logic [ID_W-1:0]   b_qid [MASK_W];
  logic [$clog2(MASK_W):0] a_cnt, b_cnt;

  sliding_mask #(.MASK_W(MASK_W), .WIN_W(WIN_W)) u_mask_a (
    .mask(rs1_val[MASK_W-1:0]), .win(dec.win), .valid(a_valid), .qid(a_qid), .count(a_cnt));
  sliding_mask #(.MASK_W(MASK_W), .WIN_W(WIN_W)) u_mask_b (
    .mask(rs2_val[MASK_W-1:0]), .win(dec.win), .valid(b_valid), .qid(b_qid), .count(b_cnt));

  gate_bundle_t nb;
  always_comb begin
    nb = '0;
    for (int k = 0; k < LANES; k++) begin
      nb.cmd[k].gate  = CMD_G_W'(dec.gate) + CMD_G_W'(1);
      nb.cmd[k].two_q = dec.two_q;
      nb.cmd[k].ts    = ts_issue;
    end
    if (!dec.mask_mode) begin
      nb.valid[0]    = 1'b1;
      nb.cmd[0].q0   = CMD_Q_W'(dec.q0_imm);
      nb.cmd[0].q1   = dec.two_q ? CMD_Q_W'(dec.q1_imm) : '0;
    end else begin
      for (int k = 0; k < LANES; k++) begin
        nb.valid[k]  = a_valid[k] && (!dec.two_q || b_valid[k]);
        nb.cmd[k].q0 = CMD_Q_W'(a_qid[k]);
        nb.cmd[k].q1 = dec.two_q ? CMD_Q_W'(b_qid[k]) : '0;
      end
    end
  end

  logic take;
  assign ready = !out_valid || out_ready;
  assign take  = start && ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      ts_issue  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        unique case (dec.op)
          OP_QGATE: begin
            out       <= nb;
            out_valid <= |nb.valid;
          end
          OP_TSI:  ts_issue <= ts_issue + TS_W'(dec.ts_imm);
          OP_TSR:  ts_issue <= ts_issue + TS_W'(rs1_val);
          default: ;
        endcase
      end
    end
  end

  // a bundle must stay stable until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out));

endmodule
