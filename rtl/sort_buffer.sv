// sort_buffer: SortBuffer of the ConMerge assistant unit.
//
// NBANK banks, one per DPU column, each holding five classes of CLASS_DEPTH
// entries (10-bit weight column origin index + 16-bit bitmask). A column
// arriving with class c is stored in class c; if that class is full it goes
// to the next sparser class, and if that is full too, to the Extra class, as
// in the paper's SortBuffer figure. An entry that finds Extra full is lost and
// sets the sticky 'overflow' flag (the paper does not say what happens then).
// The result is a coarse sort by density without comparing entries.
//
// Reading: the banks are read together as one "row" of up to 16 columns.
// 'dense_*' shows, per bank, the entry of the densest non-empty class and
// 'sparse_*' the entry of the sparsest, in the class order high_dense, dense,
// sparse, extra, high_sparse. 'pop_dense' / 'pop_sparse' remove what is shown
// (dense wins if both are raised). Classes are stacks: order within a class is
// irrelevant to merging. One write per bank and one pop per cycle.
module sort_buffer
  import exion_pkg::*;
#(
  parameter int NBANK       = COLS,
  parameter int CLASS_DEPTH = 32,
  localparam int CW = $clog2(CLASS_DEPTH + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       wr_en  [NBANK],
  input  sp_class_e  wr_cls [NBANK],
  input  sb_entry_t  wr_data[NBANK],
  input  logic       pop_dense,
  input  logic       pop_sparse,
  output logic       dense_vld  [NBANK],
  output sb_entry_t  dense_data [NBANK],
  output logic       sparse_vld [NBANK],
  output sb_entry_t  sparse_data[NBANK],
  output logic       empty,
  output logic       overflow,
  output logic [15:0] spill_cnt
);
  // class order from densest to sparsest
  localparam logic [2:0] ORDER [NCLASS] = '{3'd0, 3'd1, 3'd2, 3'd4, 3'd3};

  sb_entry_t     mem [NBANK][NCLASS][CLASS_DEPTH];
  logic [CW-1:0] cnt [NBANK][NCLASS];

  logic [2:0] dsel [NBANK];
  logic [2:0] ssel [NBANK];
  logic [2:0] wsel [NBANK];
  logic       wok  [NBANK];
  logic       wspill [NBANK];

  always_comb begin
    empty = 1'b1;
    for (int b = 0; b < NBANK; b++) begin
      dense_vld[b] = 1'b0; sparse_vld[b] = 1'b0;
      dsel[b] = '0; ssel[b] = '0;
      for (int i = NCLASS - 1; i >= 0; i--)
        if (cnt[b][ORDER[i]] != 0) begin dense_vld[b] = 1'b1; dsel[b] = ORDER[i]; end
      for (int i = 0; i < NCLASS; i++)
        if (cnt[b][ORDER[i]] != 0) begin sparse_vld[b] = 1'b1; ssel[b] = ORDER[i]; end
      dense_data[b]  = dense_vld[b]  ? mem[b][dsel[b]][cnt[b][dsel[b]] - 1'b1] : '0;
      sparse_data[b] = sparse_vld[b] ? mem[b][ssel[b]][cnt[b][ssel[b]] - 1'b1] : '0;
      if (dense_vld[b]) empty = 1'b0;

      // placement with spill: own class, next sparser class, Extra
      wok[b] = 1'b1; wspill[b] = 1'b0;
      if (32'(cnt[b][wr_cls[b]]) < CLASS_DEPTH) wsel[b] = wr_cls[b];
      else begin
        wspill[b] = 1'b1;
        if (wr_cls[b] < CL_HSPARSE && 32'(cnt[b][wr_cls[b] + 3'd1]) < CLASS_DEPTH)
          wsel[b] = wr_cls[b] + 3'd1;
        else if (32'(cnt[b][CL_EXTRA]) < CLASS_DEPTH)
          wsel[b] = CL_EXTRA;
        else begin
          wsel[b] = CL_EXTRA; wok[b] = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBANK; b++)
        for (int c = 0; c < NCLASS; c++) cnt[b][c] <= '0;
      overflow  <= 1'b0;
      spill_cnt <= '0;
    end else if (clear) begin
      for (int b = 0; b < NBANK; b++)
        for (int c = 0; c < NCLASS; c++) cnt[b][c] <= '0;
      overflow  <= 1'b0;
      spill_cnt <= '0;
    end else begin
      for (int b = 0; b < NBANK; b++) begin
        logic [CW-1:0] n [NCLASS];
        for (int c = 0; c < NCLASS; c++) n[c] = cnt[b][c];
        if (pop_dense && dense_vld[b])        n[dsel[b]] = n[dsel[b]] - 1'b1;
        else if (pop_sparse && sparse_vld[b]) n[ssel[b]] = n[ssel[b]] - 1'b1;
        if (wr_en[b] && wok[b]) n[wsel[b]] = n[wsel[b]] + 1'b1;
        for (int c = 0; c < NCLASS; c++) cnt[b][c] <= n[c];
        if (wr_en[b] && !wok[b]) overflow <= 1'b1;
      end
      begin
        logic [15:0] s;
        s = spill_cnt;
        for (int b = 0; b < NBANK; b++) if (wr_en[b] && wspill[b]) s = s + 1'b1;
        spill_cnt <= s;
      end
    end
  end

  // entry storage (no reset, like the SRAM it stands for)
  always_ff @(posedge clk)
    for (int b = 0; b < NBANK; b++)
      if (wr_en[b] && wok[b] && !clear) begin
        // a pop in the same cycle from the same class frees the top slot first
        if ((pop_dense && dense_vld[b] && dsel[b] == wsel[b]) ||
            (!pop_dense && pop_sparse && sparse_vld[b] && ssel[b] == wsel[b]))
          mem[b][wsel[b]][cnt[b][wsel[b]] - 1'b1] <= wr_data[b];
        else
          mem[b][wsel[b]][cnt[b][wsel[b]]] <= wr_data[b];
      end
endmodule
