// tb_sdue: the 16x16 DPU array in dense mode (all three weight buffers) and
// in merged mode with random conflict vectors and control maps, against a
// reference model in the testbench. Also checks the FFN-Reuse bitmask and
// the rate of one 16-element chunk per DPU per clock: a tile of K chunks is
// ready exactly one clock after its last chunk (K + 1 cycles from the first).
module tb_sdue;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, in_valid = 0, in_first = 0, merged = 0;
  logic [1:0] dense_wbuf = 0;
  logic [191:0] in_rows [16]; logic [191:0] w_cols [3][16];
  logic cv_valid [16]; logic [3:0] cv_src [16]; cm_t cm_in [16][16];
  logic [15:0] scale = 1; logic [4:0] shift = 0; logic signed [15:0] thr = 0;
  out_t result [16][16]; logic [15:0] bitmask [16];
  sdue dut (.*);
  longint racc [16][16];
  function automatic logic [191:0] rv(); logic [191:0] v; for (int i = 0; i < 6; i++) v[i*32 +: 32] = $urandom; return v; endfunction
  function automatic longint dot(logic [191:0] a, logic [191:0] b);
    longint s = 0;
    for (int i = 0; i < 16; i++) s += longint'(data_t'(a[i*12 +: 12])) * longint'(data_t'(b[i*12 +: 12]));
    return s;
  endfunction
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int n_merged_conf = 0;
    for (int r = 0; r < 16; r++) begin in_rows[r] = 0; cv_valid[r] = 0; cv_src[r] = 0;
      for (int c = 0; c < 16; c++) cm_in[r][c] = '0; end
    for (int b = 0; b < 3; b++) for (int c = 0; c < 16; c++) w_cols[b][c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int K, t0, t1;
      K = 1 + $urandom_range(0, 6);
      merged = (t % 2 == 1); dense_wbuf = 2'(t % 3);
      for (int r = 0; r < 16; r++) begin
        cv_valid[r] = merged && $urandom_range(0, 2) == 0; cv_src[r] = 4'($urandom);
        for (int c = 0; c < 16; c++) cm_in[r][c] = '{wsel: 2'($urandom_range(0, 3)), isel: 1'($urandom)};
      end
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) racc[r][c] = 0;
      scale = 16'($urandom_range(1, 8)); shift = 5'($urandom_range(4, 10));
      thr = 16'sd0;
      @(negedge clk); t0 = $time / 10;
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < 16; r++) in_rows[r] = rv();
        for (int b = 0; b < 3; b++) for (int c = 0; c < 16; c++) w_cols[b][c] = rv();
        in_valid = 1; in_first = (k == 0);
        for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
          cm_t e; logic [191:0] x;
          e = merged ? cm_in[r][c] : '{wsel: dense_wbuf + 2'd1, isel: 1'b0};
          x = e.isel ? (cv_valid[r] ? in_rows[cv_src[r]] : '0) : in_rows[r];
          if (e.wsel != 0) racc[r][c] += dot(x, w_cols[e.wsel - 1][c]);
          if (merged && e.isel && cv_valid[r] && e.wsel != 0) n_merged_conf++;
        end
        @(negedge clk);
      end
      in_valid = 0; in_first = 0;
      // results are visible now: one edge after the last chunk
      t1 = $time / 10;
      checks++; if (t1 - t0 != K) begin failures++; $display("FAIL latency %0d vs %0d", t1 - t0, K); end
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
        longint s; s = (racc[r][c] * longint'(scale)) >>> shift;
        if (s > 32767) s = 32767; else if (s < -32768) s = -32768;
        checks++;
        if (result[r][c] != out_t'(s) || bitmask[c][r] != (s > 0)) begin
          failures++; if (failures < 10) $display("FAIL t=%0d r=%0d c=%0d got %0d exp %0d", t, r, c, result[r][c], s);
        end
      end
    end
    checks++; if (n_merged_conf == 0) begin failures++; $display("FAIL conflict line never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
