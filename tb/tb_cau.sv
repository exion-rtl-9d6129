// tb_cau: the ConMerge assistant unit as a whole. Bitmask tiles (16 columns
// of 16 bits, some all-zero) are pushed one per clock, then the generator is
// started. Checks that all-zero columns are counted as condensed and never
// computed, that every required (column, row) element appears in exactly
// one CVMEM entry, that a small class depth makes the SortBuffer spill, and
// that merging compresses the tiles into fewer entries.
module tb_cau;
  import exion_pkg::*;
  localparam int NB = 16;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, clear = 0, in_valid = 0, start = 0;
  logic [9:0] in_idx [NB]; logic [15:0] in_mask [NB];
  logic cvm_we, busy, done, overflow; logic [8:0] cvm_addr; cvm_entry_t cvm_data;
  logic [9:0] n_blocks; logic [15:0] n_condensed, n_merge_ok, n_merge_fail, n_moves, n_spill;
  cau #(.NB(NB), .CLASS_DEPTH(12), .AW(9)) dut (.clk, .rst_n, .clear, .in_valid, .in_idx, .in_mask,
    .start, .base_addr(9'd4), .cvm_we, .cvm_addr, .cvm_data, .busy, .done, .n_blocks,
    .n_condensed, .n_merge_ok, .n_merge_fail, .n_moves, .n_spill, .overflow);
  int need [int]; int n_zero, n_entries;
  initial begin repeat (40000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n && cvm_we) begin
    checks++; if (int'(cvm_addr) != 4 + n_entries) begin failures++; $display("FAIL addr"); end
    n_entries++;
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      cm_t e; e = cvm_data.cm[r][c];
      if (e.wsel != 0) begin
        int row, key;
        row = e.isel ? int'(cvm_data.cv[r].src) : r;
        key = int'(cvm_data.origin[e.wsel - 1][c].idx) * 16 + row;
        checks++;
        if (!need.exists(key) || (e.isel && !cvm_data.cv[r].valid)) begin failures++; $display("FAIL bad element"); end
        else need[key]++;
      end
    end
  end
  initial begin
    n_zero = 0; n_entries = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 24; i++) begin
      for (int b = 0; b < NB; b++) begin
        logic [15:0] m;
        m = 0;
        case ($urandom_range(0, 9))
          0, 1, 2: m = 0;
          3:       m = 16'($urandom);
          default: begin m[$urandom_range(0, 15)] = 1; m[$urandom_range(0, 15)] = 1; end
        endcase
        in_idx[b] = 10'(i * NB + b); in_mask[b] = m;
        if (m == 0) n_zero++;
        for (int r = 0; r < 16; r++) if (m[r]) need[(i * NB + b) * 16 + r] = 0;
      end
      in_valid = 1; @(negedge clk);
    end
    in_valid = 0;
    checks++; if (int'(n_condensed) != n_zero) begin failures++; $display("FAIL condensed %0d vs %0d", n_condensed, n_zero); end
    start = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    foreach (need[k]) begin checks++; if (need[k] != 1) begin failures++; if (failures < 10) $display("FAIL col %0d row %0d x%0d", k / 16, k % 16, need[k]); end end
    checks++; if (int'(n_blocks) != n_entries || n_entries >= 24) begin failures++; $display("FAIL blocks %0d entries %0d", n_blocks, n_entries); end
    checks++; if (n_spill == 0 || overflow) begin failures++; $display("FAIL no spill"); end
    $display("condensed %0d, spills %0d, overflow %0d, entries %0d, merges ok %0d fail %0d moves %0d",
             n_condensed, n_spill, overflow, n_entries, n_merge_ok, n_merge_fail, n_moves);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
