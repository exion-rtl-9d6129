// tb_gsc: writes through one port of the global scratchpad and reads through
// the other, at the full 512 KB size, including addresses at both ends.
module tb_gsc;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0; logic [13:0] a_addr, b_addr;
  gword_t a_wdata, a_rdata, b_wdata, b_rdata;
  gword_t expv [int];
  gsc dut (.*);
  function automatic gword_t rnd(); gword_t g; for (int i = 0; i < 8; i++) g[i*32 +: 32] = $urandom; return g; endfunction
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int addrs [$];
    addrs = '{0, 1, 16383, 8191, 1234, 77};
    foreach (addrs[i]) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 14'(addrs[i]); a_wdata = rnd(); expv[addrs[i]] = a_wdata;
      b_en = 1; b_we = 1; b_addr = 14'(addrs[i] ^ 14'h2000); b_wdata = rnd(); expv[addrs[i] ^ 14'h2000] = b_wdata;
    end
    @(negedge clk); a_en = 0; b_en = 0;
    foreach (addrs[i]) begin
      @(negedge clk); b_en = 1; b_we = 0; b_addr = 14'(addrs[i]); a_en = 1; a_we = 0; a_addr = 14'(addrs[i] ^ 14'h2000);
      @(negedge clk); b_en = 0; a_en = 0;
      checks++; if (b_rdata !== expv[addrs[i]]) begin failures++; $display("FAIL B %0d", addrs[i]); end
      checks++; if (a_rdata !== expv[addrs[i] ^ 14'h2000]) begin failures++; $display("FAIL A %0d", addrs[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
