// tb_dpu: drives one DPU with random INT12 vectors through all switch
// settings and compares the accumulator and the scaled result with a
// reference dot product computed in the testbench.
module tb_dpu;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, en = 0, clr = 0;
  logic [191:0] orig_in, conf_in; logic [191:0] w_in [3];
  cm_t cm; logic [15:0] scale; logic [4:0] shift;
  logic signed [35:0] acc; out_t result;
  dpu dut (.*);
  function automatic logic [191:0] rv(); logic [191:0] v; for (int i = 0; i < 6; i++) v[i*32 +: 32] = $urandom; return v; endfunction
  function automatic longint dot(logic [191:0] a, logic [191:0] b);
    longint s = 0;
    for (int i = 0; i < 16; i++) s += longint'(data_t'(a[i*12 +: 12])) * longint'(data_t'(b[i*12 +: 12]));
    return s;
  endfunction
  task automatic chk(bit ok, string m); checks++; if (!ok) begin failures++; $display("FAIL %s", m); end endtask
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    longint refacc;
    scale = 16'd1; shift = 0; cm = '{wsel: 2'd1, isel: 1'b0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int nch; logic [1:0] ws; logic is;
      nch = 1 + $urandom_range(0, 7); ws = 2'($urandom_range(0, 3)); is = 1'($urandom);
      cm = '{wsel: ws, isel: is};
      refacc = 0;
      for (int k = 0; k < nch; k++) begin
        @(negedge clk);
        orig_in = rv(); conf_in = rv(); for (int b = 0; b < 3; b++) w_in[b] = rv();
        en = 1; clr = (k == 0);
        if (ws != 0) refacc += dot(is ? conf_in : orig_in, w_in[ws - 1]);
      end
      @(negedge clk); en = 0; clr = 0;
      chk(acc == 36'(refacc), $sformatf("acc t=%0d got %0d exp %0d", t, acc, refacc));
      scale = 16'($urandom_range(1, 300)); shift = 5'($urandom_range(0, 12));
      #1;
      begin
        longint sc; sc = (refacc * longint'(scale)) >>> shift;
        if (sc > 32767) sc = 32767; else if (sc < -32768) sc = -32768;
        chk(result == out_t'(sc), $sformatf("result t=%0d got %0d exp %0d", t, result, sc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
