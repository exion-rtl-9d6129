// tb_ld_dpu: log-domain dot products of random operands against a reference
// that approximates each operand by its two leading ones and ORs the four
// one-hot partial products; also checks 3 x 5 = 15 (the four terms 8, 4, 2, 1
// do not overlap) and 3 x 3, whose middle terms coincide (OR gives 7, not 9).
module tb_ld_dpu;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, en = 0, clr = 0;
  ts_lod_t a [16], b [16]; logic signed [31:0] acc;
  data_t xa [16], xb [16];
  for (genvar i = 0; i < 16; i++) begin : g
    ts_lod la (.x(xa[i]), .y(a[i]));
    ts_lod lb (.x(xb[i]), .y(b[i]));
  end
  ld_dpu dut (.*);
  function automatic longint approx(int p, int q);
    int mp, mq; longint r; int ep [2], eq [2]; bit vp [2], vq [2]; int n;
    mp = p < 0 ? -p : p; if (mp > 2047) mp = 2047;
    mq = q < 0 ? -q : q; if (mq > 2047) mq = 2047;
    vp = '{0, 0}; vq = '{0, 0};
    n = 0; for (int i = 10; i >= 0; i--) if (mp[i] && n < 2) begin vp[n] = 1; ep[n] = i; n++; end
    n = 0; for (int i = 10; i >= 0; i--) if (mq[i] && n < 2) begin vq[n] = 1; eq[n] = i; n++; end
    r = 0;
    for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) if (vp[i] && vq[j]) r |= (longint'(1) << (ep[i] + eq[j]));
    return ((p < 0) != (q < 0)) ? -r : r;
  endfunction
  task automatic chk(bit ok, string m); checks++; if (!ok) begin failures++; $display("FAIL %s", m); end endtask
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    longint r;
    for (int i = 0; i < 16; i++) begin xa[i] = 0; xb[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // worked examples
    @(negedge clk); xa[0] = 3; xb[0] = 5; en = 1; clr = 1;
    @(negedge clk); en = 0; clr = 0; chk(acc == 15, $sformatf("3x5 got %0d", acc));
    @(negedge clk); xa[0] = 3; xb[0] = 3; en = 1; clr = 1;
    @(negedge clk); en = 0; clr = 0; chk(acc == 7, $sformatf("3x3 got %0d", acc));
    for (int t = 0; t < 40; t++) begin
      int nch; nch = 1 + $urandom_range(0, 5); r = 0;
      for (int k = 0; k < nch; k++) begin
        @(negedge clk);
        for (int i = 0; i < 16; i++) begin
          xa[i] = data_t'($urandom); xb[i] = data_t'($urandom);
          if ($urandom_range(0, 7) == 0) xa[i] = 0;
          r += approx(int'(xa[i]), int'(xb[i]));
        end
        en = 1; clr = (k == 0);
      end
      @(negedge clk); en = 0; clr = 0;
      chk(acc == 32'(r), $sformatf("t=%0d got %0d exp %0d", t, acc, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
