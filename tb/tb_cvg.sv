// tb_cvg: fills a SortBuffer with random sparse bitmask columns (unique
// weight column indices), runs the ConMerge vector generator and decodes
// every CVMEM entry it writes. Property checks:
//  - each (weight column, output row) pair required by a bitmask is computed
//    exactly once, and nothing else is computed;
//  - a DPU that uses the conflict line sits in a lane whose conflict vector
//    is valid, and the lane's conflict vector points at the required row;
//  - no DPU is used twice in an entry (one control map value per DPU);
//  - merges succeed, fail, and move conflict elements at least once each,
//    and merging needs fewer entries than there were SortBuffer rows.
module tb_cvg;
  import exion_pkg::*;
  localparam int NB = 16;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, clear = 0, start = 0;
  logic wr_en [NB]; sp_class_e wr_cls [NB]; sb_entry_t wr_data [NB];
  logic dense_vld [NB], sparse_vld [NB]; sb_entry_t dense_data [NB], sparse_data [NB];
  logic empty, overflow, pop_dense, pop_sparse; logic [15:0] spill_cnt;
  logic [4:0] ones [NB]; logic drop [NB];
  logic cvm_we; logic [8:0] cvm_addr; cvm_entry_t cvm_data;
  logic busy, done; logic [9:0] n_blocks; logic [15:0] n_merge_ok, n_merge_fail, n_moves;
  for (genvar b = 0; b < NB; b++) begin : g_cls
    sparsity_classifier u_c (.mask(wr_data[b].mask), .cls(wr_cls[b]), .ones(ones[b]), .drop(drop[b]));
  end
  sort_buffer #(.NBANK(NB), .CLASS_DEPTH(32)) u_sb (.clk, .rst_n, .clear, .wr_en, .wr_cls, .wr_data,
    .pop_dense, .pop_sparse, .dense_vld, .dense_data, .sparse_vld, .sparse_data, .empty, .overflow, .spill_cnt);
  cvg #(.NB(NB), .NL(16), .AW(9)) dut (.clk, .rst_n, .start, .base_addr(9'd0), .sb_empty(empty),
    .dense_vld, .dense_data, .sparse_vld, .sparse_data, .pop_dense, .pop_sparse,
    .cvm_we, .cvm_addr, .cvm_data, .busy, .done, .n_blocks, .n_merge_ok, .n_merge_fail, .n_moves);

  int need [int];      // key idx*16+row -> times computed
  int n_rows_in, n_entries;
  initial begin repeat (40000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // decode every written entry
  always @(posedge clk) if (rst_n && cvm_we) begin
    bit used [16][16];
    n_entries++;
    checks++; if (int'(cvm_addr) != n_entries - 1) begin failures++; $display("FAIL address %0d", cvm_addr); end
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      cm_t e; e = cvm_data.cm[r][c];
      if (e.wsel != 0) begin
        int s, row, key; s = int'(e.wsel) - 1;
        checks++;
        if (!cvm_data.origin[s][c].valid) begin failures++; $display("FAIL DPU uses an empty weight column"); end
        if (e.isel && !cvm_data.cv[r].valid) begin failures++; $display("FAIL conflict line without conflict vector"); end
        row = e.isel ? int'(cvm_data.cv[r].src) : r;
        key = int'(cvm_data.origin[s][c].idx) * 16 + row;
        if (!need.exists(key)) begin failures++; $display("FAIL computes an element no mask asked for: col %0d row %0d", cvm_data.origin[s][c].idx, row); end
        else need[key]++;
      end
    end
  end

  task automatic fill(int nrows, int dense_pct);
    for (int i = 0; i < nrows; i++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        logic [15:0] m; int k;
        m = 0;
        if ($urandom_range(0, 99) < dense_pct) m = 16'($urandom) | 16'($urandom);
        else begin k = $urandom_range(0, 3); for (int j = 0; j < k; j++) m[$urandom_range(0, 15)] = 1'b1; end
        wr_en[b] = (m != 0);
        wr_data[b] = '{idx: 10'(i * NB + b), mask: m};
        for (int r = 0; r < 16; r++) if (m[r]) need[(i * NB + b) * 16 + r] = 0;
      end
      n_rows_in++;
    end
    @(negedge clk); for (int b = 0; b < NB; b++) wr_en[b] = 0;
  endtask

  initial begin
    for (int b = 0; b < NB; b++) begin wr_en[b] = 0; wr_data[b] = '0; end
    n_entries = 0; n_rows_in = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      need.delete(); n_entries = 0; n_rows_in = 0;
      clear = 1; @(negedge clk); clear = 0;
      fill(run == 2 ? 60 : 30, run == 1 ? 40 : 5);
      start = 1; @(negedge clk); start = 0;
      wait (done); @(negedge clk);
      checks++; if (int'(n_blocks) != n_entries) begin failures++; $display("FAIL n_blocks %0d vs %0d", n_blocks, n_entries); end
      foreach (need[k]) begin checks++; if (need[k] != 1) begin failures++; if (failures < 20) $display("FAIL run %0d col %0d row %0d computed %0d times", run, k / 16, k % 16, need[k]); end end
      $display("run %0d: %0d rows -> %0d entries, merges ok %0d fail %0d, moves %0d", run, n_rows_in, n_entries, n_merge_ok, n_merge_fail, n_moves);
      if (run != 1) begin checks++; if (n_entries >= n_rows_in) begin failures++; $display("FAIL no compression"); end end
      checks++; if (n_merge_ok == 0 || n_moves == 0) begin failures++; $display("FAIL mechanisms not exercised"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
