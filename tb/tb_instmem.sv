// tb_instmem: writes random instruction words and reads them back, checking
// the one-cycle read latency.
module tb_instmem;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0; logic [8:0] wr_addr, rd_addr; logic [63:0] wr_data; instr_t rd_data;
  logic [63:0] ref_mem [384];
  instmem dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 384; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 9'(i); wr_data = {$urandom, $urandom}; ref_mem[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 384; i += 7) begin
      @(negedge clk); rd_en = 1; rd_addr = 9'(i);
      @(negedge clk); rd_en = 0;
      checks++; if (64'(rd_data) !== ref_mem[i]) begin failures++; $display("FAIL addr %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
