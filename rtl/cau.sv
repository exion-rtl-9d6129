// cau: ConMerge assistant unit.
//
// While the SDUE (FFN layers) or the EPRE (attention scores) produce a tile,
// the CAU receives for each of the 16 DPU columns the column's weight origin
// index and its bitmask. Each goes through its sparsity-level classifier into
// its SortBuffer bank; all-zero columns are dropped (condensing). On 'start'
// the ConMerge vector generator turns the sorted rows into merged blocks and
// writes their conflict vectors, control maps and origin indices to CVMEM
// starting at 'base_addr'. 'clear' empties the SortBuffer.
module cau
  import exion_pkg::*;
#(
  parameter int NB          = COLS,
  parameter int CLASS_DEPTH = 32,
  parameter int AW          = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [COL_IDX_W-1:0] in_idx  [NB],
  input  logic [MASK_W-1:0]    in_mask [NB],
  input  logic          start,
  input  logic [AW-1:0] base_addr,
  output logic          cvm_we,
  output logic [AW-1:0] cvm_addr,
  output cvm_entry_t    cvm_data,
  output logic          busy,
  output logic          done,
  output logic [AW:0]   n_blocks,
  output logic [15:0]   n_condensed,
  output logic [15:0]   n_merge_ok,
  output logic [15:0]   n_merge_fail,
  output logic [15:0]   n_moves,
  output logic [15:0]   n_spill,
  output logic          overflow
);
  logic      wr_en  [NB];
  sp_class_e wr_cls [NB];
  sb_entry_t wr_data[NB];
  logic      drop   [NB];
  logic      pop_dense, pop_sparse, sb_empty;
  logic      dense_vld [NB], sparse_vld [NB];
  sb_entry_t dense_data[NB], sparse_data[NB];

  for (genvar b = 0; b < NB; b++) begin : g_cls
    logic [$clog2(MASK_W+1)-1:0] ones_unused;
    sparsity_classifier u_cls (.mask(in_mask[b]), .cls(wr_cls[b]), .ones(ones_unused), .drop(drop[b]));
    assign wr_en[b]   = in_valid && !drop[b];
    assign wr_data[b] = '{idx: in_idx[b], mask: in_mask[b]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_condensed <= '0;
    else if (clear) n_condensed <= '0;
    else if (in_valid) begin
      logic [15:0] s;
      s = n_condensed;
      for (int b = 0; b < NB; b++) s = s + 16'(drop[b]);
      n_condensed <= s;
    end
  end

  sort_buffer #(.NBANK(NB), .CLASS_DEPTH(CLASS_DEPTH)) u_sb (
    .clk, .rst_n, .clear, .wr_en, .wr_cls, .wr_data,
    .pop_dense, .pop_sparse, .dense_vld, .dense_data, .sparse_vld, .sparse_data,
    .empty(sb_empty), .overflow, .spill_cnt(n_spill));

  cvg #(.NB(NB), .NL(MASK_W), .AW(AW)) u_cvg (
    .clk, .rst_n, .start, .base_addr, .sb_empty,
    .dense_vld, .dense_data, .sparse_vld, .sparse_data, .pop_dense, .pop_sparse,
    .cvm_we, .cvm_addr, .cvm_data, .busy, .done, .n_blocks,
    .n_merge_ok, .n_merge_fail, .n_moves);
endmodule
