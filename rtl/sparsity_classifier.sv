// sparsity_classifier: sparsity-level classifier of the ConMerge assistant unit.
//
// Counts the set bits of a column's 16-bit bitmask (one bit per output row
// that must be computed) and puts the column in one of the SortBuffer's
// density classes: high_dense (12..16 ones), dense (8..11), sparse (4..7) or
// high_sparse (1..3). The class names are the paper's; the boundaries are
// this design's (even quarters of the lane count). An all-zero mask is flagged
// 'drop': such a column needs no computation at all and is not stored, which
// is the condensing half of ConMerge. Purely combinational.
module sparsity_classifier
  import exion_pkg::*;
#(
  parameter int W = MASK_W
) (
  input  logic [W-1:0] mask,
  output sp_class_e    cls,
  output logic [$clog2(W+1)-1:0] ones,
  output logic         drop
);
  always_comb begin
    ones = '0;
    for (int i = 0; i < W; i++) ones = ones + mask[i];
    drop = (ones == 0);
    if (32'(ones) * 4 >= 3 * W)      cls = CL_HDENSE;
    else if (32'(ones) * 4 >= 2 * W) cls = CL_DENSE;
    else if (32'(ones) * 4 >= W)     cls = CL_SPARSE;
    else                             cls = CL_HSPARSE;
  end
endmodule
