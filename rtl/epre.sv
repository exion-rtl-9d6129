// epre: eager prediction engine.
//
// Predicts attention scores (or Q/K/V projections) cheaply in the log domain.
// Every input element from IMEM and every weight element from WMEM passes a
// two-step leading-one detector; a ROWS x COLS array of log-domain DPUs then
// accumulates approximate dot products, 16 elements per DPU per cycle, with
// the same chunk timing as the SDUE. After the last chunk, 'score' holds the
// predicted tile (accumulator >>> shift, saturated to 16 bit) and each row
// goes through top-k / one-hot selection. 'col_mask' is the transposed
// selection: for each output column, which rows must really be computed; this
// is the sparsity information the CAU sorts.
module epre
  import exion_pkg::*;
#(
  parameter int ROWS = LANES,
  parameter int NCOL = COLS,
  parameter int N    = LANE_LEN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic [N*DW-1:0]   in_rows [ROWS],
  input  logic [N*DW-1:0]   w_cols  [NCOL],
  input  logic [4:0]        shift,
  input  logic [4:0]        k,
  input  logic [15:0]       ep_thr,
  output out_t              score   [ROWS][NCOL],
  output logic [NCOL-1:0]   row_mask [ROWS],
  output logic              row_onehot [ROWS],
  output logic [ROWS-1:0]   col_mask [NCOL]
);
  ts_lod_t lod_in [ROWS][N];
  ts_lod_t lod_w  [NCOL][N];

  for (genvar r = 0; r < ROWS; r++) begin : g_lod_in
    for (genvar i = 0; i < N; i++) begin : g_e
      ts_lod u_lod (.x(data_t'(in_rows[r][i*DW +: DW])), .y(lod_in[r][i]));
    end
  end
  for (genvar c = 0; c < NCOL; c++) begin : g_lod_w
    for (genvar i = 0; i < N; i++) begin : g_e
      ts_lod u_lod (.x(data_t'(w_cols[c][i*DW +: DW])), .y(lod_w[c][i]));
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < NCOL; c++) begin : g_col
      logic signed [LD_ACC_W-1:0] acc;
      ld_dpu #(.N(N)) u_ld (
        .clk, .rst_n, .en(in_valid), .clr(in_first),
        .a(lod_in[r]), .b(lod_w[c]), .acc);
      assign score[r][c] = sat16(64'(acc) >>> shift);
    end
    ep_topk #(.ROW_LEN(NCOL)) u_topk (
      .score(score[r]), .k, .thr(ep_thr), .mask(row_mask[r]), .onehot(row_onehot[r]));
  end

  always_comb
    for (int c = 0; c < NCOL; c++)
      for (int r = 0; r < ROWS; r++)
        col_mask[c][r] = row_mask[r][c];
endmodule
