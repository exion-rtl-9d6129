// tb_imem: fills every bank of every buffer at a few addresses with distinct
// words and checks that one read returns all banks of all buffers.
module tb_imem;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0; logic [0:0] wr_buf; logic [3:0] wr_bank;
  logic [5:0] wr_addr, rd_addr; vec_t wr_data; vec_t rd_data [2][16];
  vec_t refm [2][16][int];
  imem dut (.*);
  function automatic vec_t rnd(); vec_t v; for (int i = 0; i < 6; i++) v[i*32 +: 32] = $urandom; return v; endfunction
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int addrs [$];
    addrs = '{0, 63, 32, 3};
    foreach (addrs[a]) for (int b = 0; b < 2; b++) for (int k = 0; k < 16; k++) begin
      @(negedge clk); wr_en = 1; wr_buf = b; wr_bank = 4'(k); wr_addr = addrs[a]; wr_data = rnd();
      refm[b][k][addrs[a]] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    foreach (addrs[a]) begin
      @(negedge clk); rd_en = 1; rd_addr = addrs[a];
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < 2; b++) for (int k = 0; k < 16; k++) begin
        checks++; if (rd_data[b][k] !== refm[b][k][addrs[a]]) begin failures++; $display("FAIL %0d %0d %0d", addrs[a], b, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
