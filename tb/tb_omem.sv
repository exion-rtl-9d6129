// tb_omem: writes whole rows (one word per bank) into both buffers and reads
// them back.
module tb_omem;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic row_wr_en = 0, rd_en = 0; logic row_wr_buf; logic [5:0] row_wr_addr, rd_addr;
  gword_t row_wr_data [16]; gword_t rd_data [2][16];
  gword_t refm [2][48][16];
  omem dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int b = 0; b < 2; b++) for (int a = 0; a < 48; a += 11) begin
      @(negedge clk); row_wr_en = 1; row_wr_buf = b[0]; row_wr_addr = 6'(a);
      for (int k = 0; k < 16; k++) begin
        for (int j = 0; j < 8; j++) row_wr_data[k][j*32 +: 32] = $urandom;
        refm[b][a][k] = row_wr_data[k];
      end
    end
    @(negedge clk); row_wr_en = 0;
    for (int a = 0; a < 48; a += 11) begin
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < 2; b++) for (int k = 0; k < 16; k++) begin
        checks++; if (rd_data[b][k] !== refm[b][a][k]) begin failures++; $display("FAIL %0d %0d %0d", a, b, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
