// qv_unit: executes the qV gate instructions VQQI and VQQG.
//
// Both apply a gate to every element i of two qubit-index vectors:
//   VQQI vr2, vr1, GATE : gate GATE on qubits vr1[i], vr2[i]        (SIMD: one gate)
//   VQQG vr2, vr1, vr3  : gate vr3[i] on qubits vr1[i], vr2[i]      (MIMD: gate list)
// Qubit indices count from 1; an element whose vr1 index is 0, or whose gate is 0, is a
// NOP and produces nothing (the two masking rules the paper gives). These semantics are
// the paper's. This design's own choices: an element with vr2 index 0 is a single-qubit
// gate on vr1[i]; emitted qubits are counted from 0 (index-1); the gate code is sent
// unchanged; all gates carry the current issue time stamp.
// The vector registers are read whole, and LANES elements (element i in lane i mod
// LANES) go out as one gate bundle per cycle, in ceil(MVL/LANES) bundles; with the
// default MVL = LANES = 32 an instruction is one bundle, registered and offered the
// cycle after `start`, and the unit takes one instruction per cycle while out_ready is
// high. A bundle whose elements are all NOPs is dropped.
module qv_unit
  import quasar_pkg::*;
#(
  parameter int unsigned P_NVREG = NVREG,
  parameter int unsigned P_MVL   = MVL,
  parameter int unsigned P_VES   = VES,
  localparam int unsigned RA_W  = $clog2(P_NVREG),
  localparam int unsigned BEATS = (P_MVL + LANES - 1) / LANES,
  localparam int unsigned BT_W  = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  dec_t               dec,
  input  logic [TS_W-1:0]    ts_issue,
  output logic               ready,
  // vector register file read ports (whole registers)
  output logic [RA_W-1:0]    vrf_raddr [3],
  input  logic [P_VES-1:0]   vrf_rdata [3][P_MVL],
  // gate bundles
  output logic               out_valid,
  input  logic               out_ready,
  output gate_bundle_t       out
);

  logic             busy, mimd_q;          // busy: further bundles of this instruction
  logic [BT_W-1:0]  beat;
  logic [VR_W-1:0]  r1, r2, r3;
  logic [OPC_W-1:0] gate_imm_q;
  logic             is_vq, take, step, mimd;
  logic [OPC_W-1:0] gate_imm;
  logic [BT_W-1:0]  beat_now;

  assign is_vq    = (dec.op == OP_VQQI) || (dec.op == OP_VQQG);
  assign ready    = !busy && (!out_valid || out_ready);
  assign take     = start && ready && is_vq;
  assign step     = busy && (!out_valid || out_ready);
  assign mimd     = busy ? mimd_q : (dec.op == OP_VQQG);
  assign gate_imm = busy ? gate_imm_q : dec.opcode;
  assign beat_now = busy ? beat : '0;

  assign vrf_raddr[0] = RA_W'(busy ? r1 : dec.vr1);
  assign vrf_raddr[1] = RA_W'(busy ? r2 : dec.vr2);
  assign vrf_raddr[2] = RA_W'(busy ? r3 : dec.vr3);

  gate_bundle_t nb;
  always_comb begin
    nb = '0;
    for (int k = 0; k < LANES; k++) begin
      int e;
      logic [P_VES-1:0] q0i, q1i, g;
      e = int'(beat_now) * LANES + k;
      q0i = '0; q1i = '0; g = '0;
      if (e < int'(P_MVL)) begin
        q0i = vrf_rdata[0][e];
        q1i = vrf_rdata[1][e];
        g   = mimd ? vrf_rdata[2][e] : P_VES'(gate_imm);
      end
      nb.valid[k]     = (q0i != '0) && (g != '0);
      nb.cmd[k].gate  = CMD_G_W'(g);
      nb.cmd[k].two_q = (q1i != '0);
      nb.cmd[k].q0    = CMD_Q_W'(q0i - P_VES'(1));
      nb.cmd[k].q1    = (q1i != '0) ? CMD_Q_W'(q1i - P_VES'(1)) : '0;
      nb.cmd[k].ts    = ts_issue;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      mimd_q     <= 1'b0;
      beat       <= '0;
      r1         <= '0;
      r2         <= '0;
      r3         <= '0;
      gate_imm_q <= '0;
      out_valid  <= 1'b0;
      out        <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take || step) begin
        out       <= nb;
        out_valid <= |nb.valid;
        if (beat_now == BT_W'(BEATS - 1)) begin
          busy <= 1'b0;
          beat <= '0;
        end else begin
          busy <= 1'b1;
          beat <= beat_now + BT_W'(1);
        end
      end
      if (take) begin
        mimd_q     <= (dec.op == OP_VQQG);
        r1         <= dec.vr1;
        r2         <= dec.vr2;
        r3         <= dec.vr3;
        gate_imm_q <= dec.opcode;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out));

endmodule
