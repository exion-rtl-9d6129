// ep_topk: top-k selection and one-hot approximation of eager prediction.
//
// For one row of predicted attention scores it keeps the k largest elements
// (mask bit 1) and marks the others as skippable. If the largest score beats
// the second largest by more than 'thr' the row is one-hot: only the largest
// element is kept and the row's real computation can be skipped. Ranking is
// done with all pairwise comparators; equal scores rank the lower index
// first. The paper gives the rule; a row here is one 16-wide tile row, and the
// comparator network is this design's. Purely combinational.
module ep_topk
  import exion_pkg::*;
#(
  parameter int ROW_LEN = COLS
) (
  input  out_t               score [ROW_LEN],
  input  logic [4:0]         k,
  input  logic [15:0]        thr,
  output logic [ROW_LEN-1:0] mask,
  output logic               onehot
);
  logic [$clog2(ROW_LEN+1)-1:0] rank [ROW_LEN];
  out_t first, second;
  logic [ROW_LEN-1:0] top1;
  logic signed [17:0] diff;

  always_comb begin
    first = '0; second = '0; top1 = '0;
    for (int i = 0; i < ROW_LEN; i++) begin
      rank[i] = '0;
      for (int j = 0; j < ROW_LEN; j++)
        if (j != i && (score[j] > score[i] || (score[j] == score[i] && j < i)))
          rank[i] = rank[i] + 1'b1;
    end
    for (int i = 0; i < ROW_LEN; i++) begin
      if (rank[i] == 0) begin first = score[i]; top1[i] = 1'b1; end
      if (rank[i] == 1) second = score[i];
    end
    diff   = 18'(first) - 18'(second);
    onehot = (ROW_LEN > 1) && (diff > $signed({2'b00, thr}));
    for (int i = 0; i < ROW_LEN; i++)
      mask[i] = onehot ? top1[i] : (32'(rank[i]) < 32'(k));
  end
endmodule
