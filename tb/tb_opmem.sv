// tb_opmem: writes operand-memory words and reads two different addresses in
// the same cycle through the two read ports.
module tb_opmem;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rda_en = 0, rdb_en = 0; logic [11:0] wr_addr, rda_addr, rdb_addr;
  gword_t wr_data, rda_data, rdb_data;
  gword_t refm [int];
  opmem dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 3072; i += 31) begin
      @(negedge clk); wr_en = 1; wr_addr = 12'(i);
      for (int j = 0; j < 8; j++) wr_data[j*32 +: 32] = $urandom;
      refm[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i + 31 < 3072; i += 62) begin
      @(negedge clk); rda_en = 1; rdb_en = 1; rda_addr = 12'(i); rdb_addr = 12'(i + 31);
      @(negedge clk); rda_en = 0; rdb_en = 0;
      checks++; if (rda_data !== refm[i]) begin failures++; $display("FAIL a %0d", i); end
      checks++; if (rdb_data !== refm[i+31]) begin failures++; $display("FAIL b %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
