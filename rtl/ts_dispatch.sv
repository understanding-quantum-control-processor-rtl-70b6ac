// ts_dispatch: time-stamp timing controller in front of the pulse back end.
//
// The paper treats a quantum control processor as a real-time system: all gates of one
// time stamp must reach the pulse hardware within that time stamp, whose length is the
// shortest gate pulse (20 ns for a superconducting single-qubit gate). Gates that arrive
// later are a timing-constraint failure. This block makes that rule concrete.
// Gate bundles (all gates of one instruction, one time stamp) enter a FIFO of DEPTH
// entries (in_ready low when full, which stalls the issuing units). After `start`, a
// real-time counter ts_now begins at 0 and advances every CYCLES_PER_TS clock cycles
// (4 cycles = 20 ns at the paper's 200 MHz FPGA clock). The head bundle is released
// when its time stamp is not in the future (ts <= ts_now); it is flagged `out_late`, and
// its gates are added to late_count, when its time stamp has already passed
// (ts < ts_now). One bundle per cycle leaves. The time stamp of a bundle is that of its
// lane 0 (all lanes carry the same one). The FIFO, the release rule and the counters
// are this design's own.
module ts_dispatch
  import quasar_pkg::*;
#(
  parameter int unsigned DEPTH         = 16,
  parameter int unsigned CYCLES_PER_TS = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            in_valid,
  output logic            in_ready,
  input  gate_bundle_t    in_cmd,
  output logic            out_valid,
  input  logic            out_ready,
  output gate_bundle_t    out_cmd,
  output logic            out_late,
  output logic [TS_W-1:0] ts_now,
  output logic [31:0]     late_count,
  output logic            empty
);

  localparam int unsigned PTR_W = $clog2(DEPTH);
  localparam int unsigned CNT_W = $clog2(CYCLES_PER_TS + 1);

  gate_bundle_t     fifo [DEPTH];
  logic [TS_W-1:0]  head_ts;
  logic [$clog2(LANES):0] head_n;
  logic [PTR_W-1:0] wptr, rptr;
  logic [PTR_W:0]   count;
  logic             running;
  logic [CNT_W-1:0] tick;
  logic             push, pop;

  assign in_ready  = (count != (PTR_W+1)'(DEPTH));
  assign empty     = (count == '0);
  assign out_cmd   = fifo[rptr];
  assign head_ts   = out_cmd.cmd[0].ts;
  assign out_valid = running && !empty && (head_ts <= ts_now);
  assign out_late  = out_valid && (head_ts < ts_now);

  always_comb begin
    head_n = '0;
    for (int k = 0; k < LANES; k++) head_n = head_n + ($clog2(LANES)+1)'(out_cmd.valid[k]);
  end
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk)
    if (push) fifo[wptr] <= in_cmd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      running    <= 1'b0;
      tick       <= '0;
      ts_now     <= '0;
      late_count <= '0;
    end else begin
      if (push) wptr <= (wptr == PTR_W'(DEPTH - 1)) ? '0 : wptr + PTR_W'(1);
      if (pop)  rptr <= (rptr == PTR_W'(DEPTH - 1)) ? '0 : rptr + PTR_W'(1);
      count <= count + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
      if (pop && out_late) late_count <= late_count + 32'(head_n);
      if (start) begin
        running <= 1'b1;
        tick    <= '0;
        ts_now  <= '0;
      end else if (running) begin
        if (tick == CNT_W'(CYCLES_PER_TS - 1)) begin
          tick   <= '0;
          ts_now <= ts_now + TS_W'(1);
        end else begin
          tick <= tick + CNT_W'(1);
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && count == (PTR_W+1)'(DEPTH)));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
