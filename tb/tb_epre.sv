// tb_epre: the eager prediction engine on random tiles. The reference
// approximates every operand by its two leading ones, ORs the four one-hot
// partial products, scales, and ranks each row. Checks scores, top-k row
// masks, one-hot flags, the transposed column mask and the K + 1 cycle
// latency of a K-chunk tile.
module tb_epre;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, in_valid = 0, in_first = 0;
  logic [191:0] in_rows [16], w_cols [16];
  logic [4:0] shift, k; logic [15:0] ep_thr;
  out_t score [16][16]; logic [15:0] row_mask [16]; logic row_onehot [16]; logic [15:0] col_mask [16];
  epre dut (.*);
  longint racc [16][16];
  function automatic longint approx(int p, int q);
    int mp, mq, n; longint r; int ep [2], eq [2]; bit vp [2], vq [2];
    mp = p < 0 ? -p : p; if (mp > 2047) mp = 2047;
    mq = q < 0 ? -q : q; if (mq > 2047) mq = 2047;
    vp = '{0, 0}; vq = '{0, 0};
    n = 0; for (int i = 10; i >= 0; i--) if (mp[i] && n < 2) begin vp[n] = 1; ep[n] = i; n++; end
    n = 0; for (int i = 10; i >= 0; i--) if (mq[i] && n < 2) begin vq[n] = 1; eq[n] = i; n++; end
    r = 0;
    for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) if (vp[i] && vq[j]) r |= (longint'(1) << (ep[i] + eq[j]));
    return ((p < 0) != (q < 0)) ? -r : r;
  endfunction
  function automatic logic [191:0] rv(int big); logic [191:0] v;
    for (int i = 0; i < 16; i++) v[i*12 +: 12] = big ? 12'($urandom) : 12'($urandom_range(0, 63) - 32);
    return v;
  endfunction
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int n_oh = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      int K, t0;
      K = 1 + $urandom_range(0, 3);
      shift = 5'($urandom_range(6, 12)); k = 5'($urandom_range(1, 8)); ep_thr = 16'($urandom_range(100, 3000));
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) racc[r][c] = 0;
      @(negedge clk); t0 = $time / 10;
      for (int kk = 0; kk < K; kk++) begin
        for (int r = 0; r < 16; r++) in_rows[r] = rv(1);
        // some weight columns are large so that some rows become one-hot
        for (int c = 0; c < 16; c++) w_cols[c] = rv(c == (t % 16) || t % 2 == 0);
        in_valid = 1; in_first = (kk == 0);
        for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++)
          for (int i = 0; i < 16; i++) racc[r][c] += approx(int'(data_t'(in_rows[r][i*12 +: 12])), int'(data_t'(w_cols[c][i*12 +: 12])));
        @(negedge clk);
      end
      in_valid = 0;
      checks++; if ($time / 10 - t0 != K) begin failures++; $display("FAIL latency"); end
      for (int r = 0; r < 16; r++) begin
        int s [16]; int rank [16]; int first, second; bit oh; logic [15:0] em;
        for (int c = 0; c < 16; c++) begin
          longint x; x = racc[r][c] >>> shift; if (x > 32767) x = 32767; else if (x < -32768) x = -32768;
          s[c] = int'(x);
          checks++; if (score[r][c] != out_t'(x)) begin failures++; if (failures < 10) $display("FAIL score %0d %0d got %0d exp %0d", r, c, score[r][c], x); end
        end
        for (int i = 0; i < 16; i++) begin
          rank[i] = 0;
          for (int j = 0; j < 16; j++) if (j != i && (s[j] > s[i] || (s[j] == s[i] && j < i))) rank[i]++;
          if (rank[i] == 0) first = s[i]; if (rank[i] == 1) second = s[i];
        end
        oh = (first - second) > int'(ep_thr); n_oh += int'(oh);
        for (int i = 0; i < 16; i++) em[i] = oh ? (rank[i] == 0) : (rank[i] < int'(k));
        checks++; if (row_mask[r] != em || row_onehot[r] != oh) begin failures++; $display("FAIL mask row %0d", r); end
        for (int c = 0; c < 16; c++) begin checks++; if (col_mask[c][r] != em[c]) begin failures++; $display("FAIL col_mask"); end end
      end
    end
    checks++; if (n_oh == 0) begin failures++; $display("FAIL no one-hot row seen"); end
    $display("one-hot rows: %0d", n_oh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
