// sliding_mask: expands a QUASAR mask operand into the qubit IDs it selects.
//
// In mask addressing a 32-bit general-purpose register selects qubits inside a window of
// 32 qubits, and a 4-bit immediate says which window: qubit ID = window*32 + bit. With
// 16 windows the 512 qubits of the immediate mode are reachable (the paper's "sliding
// mask"). The block is combinational and produces all IDs at once, packed to the low
// lanes in ascending order: lane k carries the k-th set bit of the mask (its rank), and
// `valid[k]` says lane k is used. Packing by rank lets two masks be paired lane by lane
// (k-th control with k-th target), which quasar_unit uses for two-qubit mask gates.
// Output `count` is the number of set bits. The rank packing is this design's own;
// the paper gives only the mask/offset encoding.
module sliding_mask #(
  parameter int unsigned MASK_W = 32,
  parameter int unsigned WIN_W  = 4,
  localparam int unsigned BIT_W = $clog2(MASK_W)
) (
  input  logic [MASK_W-1:0]       mask,
  input  logic [WIN_W-1:0]        win,
  output logic [MASK_W-1:0]       valid,
  output logic [WIN_W+BIT_W-1:0]  qid   [MASK_W],
  output logic [BIT_W:0]          count
);

  always_comb begin
    logic [BIT_W:0] rank;
    rank = '0;
    for (int k = 0; k < MASK_W; k++) qid[k] = '0;
    for (int i = 0; i < MASK_W; i++) begin
      if (mask[i]) begin
        qid[rank[BIT_W-1:0]] = {win, BIT_W'(i)};
        rank = rank + 1'b1;
      end
    end
    count = rank;
    for (int k = 0; k < MASK_W; k++) valid[k] = ((BIT_W+1)'(k) < rank);
  end

endmodule
