// sdue: sparse-dense unified engine, a LANES x COLS array of DPUs.
//
// Data paths follow the paper's SDUE figure. IMEM bank r drives the original
// line of every DPU in lane r. Each lane has a conflict-vector switch (cv_sw,
// 16-to-1) that puts one IMEM bank, chosen by the lane's conflict vector, on
// the lane's conflict line. Bank c of WMEM #0..#2 is broadcast down DPU
// column c, and each DPU's control map sets its input and weight switches.
// In dense mode every DPU uses its original line and the weight buffer
// 'dense_wbuf'; in merged mode the conflict vectors and control maps come from
// a CVMEM entry, so one pass computes up to three blocks of output columns.
//
// Besides the results the SDUE gives, for each DPU column, a 16-bit mask of
// the lanes whose result exceeds 'thr': the FFN-Reuse bitmask for the CAU.
// Comparing the first FFN layer's output with a threshold mapped through the
// inverse of GELU is this design's way of producing the paper's "output of
// the non-linear layer above a threshold" mask at the SDUE output.
//
// Timing: in_valid/in_first qualify the bank words of the current chunk; the
// accumulators update at the following clock edge, so results are ready the
// cycle after the last chunk.
module sdue
  import exion_pkg::*;
#(
  parameter int ROWS = LANES,
  parameter int NCOL = COLS,
  parameter int N    = LANE_LEN,
  localparam int SW  = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              merged,
  input  logic [1:0]        dense_wbuf,
  input  logic [N*DW-1:0]   in_rows [ROWS],
  input  logic [N*DW-1:0]   w_cols  [NWBUF][NCOL],
  input  logic              cv_valid [ROWS],
  input  logic [SW-1:0]     cv_src   [ROWS],
  input  cm_t               cm_in    [ROWS][NCOL],
  input  logic [15:0]       scale,
  input  logic [4:0]        shift,
  input  logic signed [15:0] thr,
  output out_t              result   [ROWS][NCOL],
  output logic [ROWS-1:0]   bitmask  [NCOL]
);
  logic [N*DW-1:0] conf_line [ROWS];

  // cv_sw: one 16-to-1 multiplexer per lane
  always_comb
    for (int r = 0; r < ROWS; r++)
      conf_line[r] = cv_valid[r] ? in_rows[cv_src[r]] : '0;

  for (genvar r = 0; r < ROWS; r++) begin : g_lane
    for (genvar c = 0; c < NCOL; c++) begin : g_col
      cm_t cm_eff;
      logic [N*DW-1:0] wl [NWBUF];
      logic signed [ACC_W-1:0] acc_unused;
      always_comb begin
        if (merged) cm_eff = cm_in[r][c];
        else        cm_eff = '{wsel: dense_wbuf + 2'd1, isel: 1'b0};
        for (int b = 0; b < NWBUF; b++) wl[b] = w_cols[b][c];
      end
      dpu #(.N(N)) u_dpu (
        .clk, .rst_n, .en(in_valid), .clr(in_first),
        .orig_in(in_rows[r]), .conf_in(conf_line[r]), .w_in(wl),
        .cm(cm_eff), .scale, .shift, .acc(acc_unused), .result(result[r][c]));
    end
  end

  always_comb
    for (int c = 0; c < NCOL; c++)
      for (int r = 0; r < ROWS; r++)
        bitmask[c][r] = (result[r][c] > thr);
endmodule
