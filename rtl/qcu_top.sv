// qcu_top: quantum control unit, the QUASAR and qV extension of an RV32 control processor.
//
// The host RV32 core (not part of this RTL) fetches the program, keeps the general-purpose
// registers and hands every QUASAR/qV instruction to this unit together with the values of
// rs1 and rs2 (q_valid/q_ready handshake). The unit decodes it and sends it to one of
//   quasar_unit : scalar gates in immediate or sliding-mask addressing, TSi/TSr,
//   qv_vld      : vector load from data memory into the vector register file,
//   qv_unit     : VQQI / VQQG over the vector register file,
// and funnels the gate bundles (all gates of one instruction, tagged with their time
// stamp) into ts_dispatch, which hands them to the pulse back end in real time and counts
// gates that miss their time stamp. meas_reg keeps measurement results for the core to
// read as 32-bit windows.
// Instructions are taken in order. QUASAR instructions and VQQI/VQQG (at MVL = LANES)
// are taken one per cycle, the rate the paper's timing analysis assumes; a VLD holds
// q_ready low until its last element is in the register file. A full gate FIFO also
// drops q_ready, which is how the host core is stalled. Parameter defaults are the
// paper's sizes (512 qubits, MVL 32, VES 32, 32 vector registers); the FIFO depth and
// the cycles per time stamp are this design's own (4 cycles = 20 ns at 200 MHz).
module qcu_top
  import quasar_pkg::*;
#(
  parameter int unsigned P_NVREG       = NVREG,
  parameter int unsigned P_MVL         = MVL,
  parameter int unsigned P_VES         = VES,
  parameter int unsigned FIFO_DEPTH    = 16,
  parameter int unsigned CYCLES_PER_TS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the host core
  input  logic              q_valid,
  output logic              q_ready,
  input  logic [31:0]       q_inst,
  input  logic [31:0]       q_rs1,
  input  logic [31:0]       q_rs2,
  output logic              q_idle,
  // data memory read port (vector loads)
  output logic              dmem_req,
  output logic [31:0]       dmem_addr,
  input  logic              dmem_rvalid,
  input  logic [P_VES-1:0]  dmem_rdata,
  // real-time gate delivery to the pulse back end
  input  logic              ts_start,
  output logic              gate_valid,
  input  logic              gate_ready,
  output gate_bundle_t      gate_cmd,
  output logic              gate_late,
  output logic [TS_W-1:0]   ts_now,
  output logic [31:0]       late_count,
  // measurement results from the readout back end, and their read port for the core
  input  logic              meas_valid,
  input  logic [QID_W-1:0]  meas_qubit,
  input  logic              meas_bit,
  input  logic              meas_clr,
  input  logic [WIN_W-1:0]  meas_rd_win,
  output logic [31:0]       meas_rd_data,
  output logic [31:0]       meas_rd_done
);

  localparam int unsigned RA_W = $clog2(P_NVREG);
  localparam int unsigned EI_W = $clog2(P_MVL);

  dec_t dec;
  logic start, qs_ready, vld_ready, qv_ready, fifo_empty;

  qcu_decoder u_dec (.inst(q_inst), .dec);

  assign q_ready = qs_ready && vld_ready && qv_ready;
  assign start   = q_valid && q_ready;
  assign q_idle  = q_ready && fifo_empty;

  logic qs_start, vld_start, qv_start;
  assign qs_start  = start && (dec.op inside {OP_QGATE, OP_TSI, OP_TSR});
  assign vld_start = start && (dec.op == OP_VLD);
  assign qv_start  = start && (dec.op inside {OP_VQQI, OP_VQQG});

  // ---------------- scalar QUASAR ----------------
  logic             qs_cmd_valid, qv_cmd_valid, cmd_ready;
  gate_bundle_t     qs_cmd, qv_cmd;
  logic [TS_W-1:0]  ts_issue;

  quasar_unit u_quasar (
    .clk, .rst_n, .start(qs_start), .dec, .rs1_val(q_rs1), .rs2_val(q_rs2),
    .ready(qs_ready), .out_valid(qs_cmd_valid), .out_ready(cmd_ready), .out(qs_cmd), .ts_issue);

  // ---------------- qV ----------------
  logic              vrf_we;
  logic [RA_W-1:0]   vrf_waddr;
  logic [EI_W-1:0]   vrf_widx;
  logic [P_VES-1:0]  vrf_wdata;
  logic [RA_W-1:0]   vrf_raddr [3];
  logic [P_VES-1:0]  vrf_rdata [3][P_MVL];

  qv_vrf #(.P_NVREG(P_NVREG), .P_MVL(P_MVL), .P_VES(P_VES)) u_vrf (
    .clk, .we(vrf_we), .waddr(vrf_waddr), .widx(vrf_widx), .wdata(vrf_wdata),
    .raddr(vrf_raddr), .rdata(vrf_rdata));

  qv_vld #(.P_NVREG(P_NVREG), .P_MVL(P_MVL), .P_VES(P_VES)) u_vld (
    .clk, .rst_n, .start(vld_start), .vd(RA_W'(dec.vr3)), .base(q_rs1), .ready(vld_ready),
    .mem_req(dmem_req), .mem_addr(dmem_addr), .mem_rvalid(dmem_rvalid), .mem_rdata(dmem_rdata),
    .vrf_we, .vrf_waddr, .vrf_widx, .vrf_wdata);

  qv_unit #(.P_NVREG(P_NVREG), .P_MVL(P_MVL), .P_VES(P_VES)) u_qv (
    .clk, .rst_n, .start(qv_start), .dec, .ts_issue, .ready(qv_ready),
    .vrf_raddr, .vrf_rdata,
    .out_valid(qv_cmd_valid), .out_ready(cmd_ready), .out(qv_cmd));

  // ---------------- timing ----------------
  // A unit only takes an instruction while the other has nothing waiting (q_ready),
  // so at most one of the two offers a bundle in a cycle.
  gate_bundle_t in_cmd;
  assign in_cmd = qv_cmd_valid ? qv_cmd : qs_cmd;

  ts_dispatch #(.DEPTH(FIFO_DEPTH), .CYCLES_PER_TS(CYCLES_PER_TS)) u_ts (
    .clk, .rst_n, .start(ts_start),
    .in_valid(qs_cmd_valid || qv_cmd_valid), .in_ready(cmd_ready), .in_cmd,
    .out_valid(gate_valid), .out_ready(gate_ready), .out_cmd(gate_cmd), .out_late(gate_late),
    .ts_now, .late_count, .empty(fifo_empty));

  // ---------------- measurement ----------------
  meas_reg u_meas (
    .clk, .rst_n, .clr(meas_clr), .meas_valid, .meas_qubit, .meas_bit,
    .rd_win(meas_rd_win), .rd_data(meas_rd_data), .rd_done(meas_rd_done));

  assert property (@(posedge clk) disable iff (!rst_n) !(qs_cmd_valid && qv_cmd_valid));

endmodule
