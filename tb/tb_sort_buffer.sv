// tb_sort_buffer: random writes and pops against a stack-per-class model,
// with a small class depth so that spills to the next sparser class, to
// Extra, and overflow all happen. Checks what is shown for dense and sparse
// reads, 'empty', the spill count and the overflow flag every cycle.
module tb_sort_buffer;
  import exion_pkg::*;
  localparam int NB = 16, D = 4;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, clear = 0, pop_dense = 0, pop_sparse = 0;
  logic wr_en [NB]; sp_class_e wr_cls [NB]; sb_entry_t wr_data [NB];
  logic dense_vld [NB], sparse_vld [NB]; sb_entry_t dense_data [NB], sparse_data [NB];
  logic empty, overflow; logic [15:0] spill_cnt;
  sort_buffer #(.NBANK(NB), .CLASS_DEPTH(D)) dut (.*);
  sb_entry_t q [NB][5][$];
  int m_spill = 0; bit m_ovf = 0;
  int order [5] = '{0, 1, 2, 4, 3};
  int n_to_next = 0, n_to_extra = 0;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int b = 0; b < NB; b++) begin wr_en[b] = 0; wr_cls[b] = CL_HDENSE; wr_data[b] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      // compare what is shown now
      bit m_empty; m_empty = 1;
      for (int b = 0; b < NB; b++) begin
        int dc, sc; dc = -1; sc = -1;
        for (int i = 4; i >= 0; i--) if (q[b][order[i]].size() > 0) dc = order[i];
        for (int i = 0; i < 5; i++) if (q[b][order[i]].size() > 0) sc = order[i];
        if (dc >= 0) m_empty = 0;
        checks++;
        if (dense_vld[b] != (dc >= 0) || sparse_vld[b] != (sc >= 0) ||
            (dc >= 0 && dense_data[b] != q[b][dc][$]) || (sc >= 0 && sparse_data[b] != q[b][sc][$])) begin
          failures++; if (failures < 10) $display("FAIL show t=%0d b=%0d dv %0d %0d sv %0d %0d dd %h exp %h sd %h exp %h", t, b, dense_vld[b], dc, sparse_vld[b], sc, dense_data[b], dc>=0 ? q[b][dc][$] : 0, sparse_data[b], sc>=0 ? q[b][sc][$] : 0);
        end
      end
      checks++; if (empty != m_empty || overflow != m_ovf || int'(spill_cnt) != m_spill) begin
        failures++; if (failures < 10) $display("FAIL flags t=%0d empty %0d/%0d ovf %0d/%0d spill %0d/%0d", t, empty, m_empty, overflow, m_ovf, spill_cnt, m_spill);
      end
      // drive the next cycle; write-heavy phases alternate with pop-heavy ones
      pop_dense = 0; pop_sparse = 0;
      if ((t / 100) % 2 == 1 || $urandom_range(0, 3) == 0) begin
        if ($urandom_range(0, 1)) pop_dense = 1; else pop_sparse = 1;
      end
      for (int b = 0; b < NB; b++) begin
        wr_en[b] = ((t / 100) % 2 == 0) ? ($urandom_range(0, 2) != 0) : ($urandom_range(0, 5) == 0);
        wr_cls[b] = sp_class_e'($urandom_range(0, 3));
        wr_data[b] = '{idx: 10'($urandom), mask: 16'($urandom)};
      end
      // model update (pop first, then push)
      for (int b = 0; b < NB; b++) begin
        int dc, sc, c; dc = -1; sc = -1;
        for (int i = 4; i >= 0; i--) if (q[b][order[i]].size() > 0) dc = order[i];
        for (int i = 0; i < 5; i++) if (q[b][order[i]].size() > 0) sc = order[i];
        c = int'(wr_cls[b]);
        if (wr_en[b]) begin
          int dst; dst = -1;
          if (q[b][c].size() < D) dst = c;
          else begin
            m_spill++;
            if (c < 3 && q[b][c + 1].size() < D) begin dst = c + 1; n_to_next++; end
            else if (q[b][4].size() < D) begin dst = 4; n_to_extra++; end
            else m_ovf = 1;
          end
          if (pop_dense && dc >= 0) void'(q[b][dc].pop_back());
          else if (pop_sparse && sc >= 0) void'(q[b][sc].pop_back());
          if (dst >= 0) q[b][dst].push_back(wr_data[b]);
        end else begin
          if (pop_dense && dc >= 0) void'(q[b][dc].pop_back());
          else if (pop_sparse && sc >= 0) void'(q[b][sc].pop_back());
        end
      end
      @(negedge clk);
    end
    checks++; if (n_to_next == 0 || n_to_extra == 0 || !m_ovf) begin failures++; $display("FAIL spill paths not all exercised"); end
    // clear
    for (int b = 0; b < NB; b++) wr_en[b] = 0;
    pop_dense = 0; pop_sparse = 0; clear = 1; @(negedge clk); clear = 0;
    checks++; if (!empty || overflow || spill_cnt != 0) begin failures++; $display("FAIL clear"); end
    $display("spills to next class %0d, to extra %0d", n_to_next, n_to_extra);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
