// tb_cvmem: stores random ConMerge vector entries and reads them back.
module tb_cvmem;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0; logic [8:0] wr_addr, rd_addr; cvm_entry_t wr_data, rd_data;
  cvm_entry_t refm [297];
  cvmem dut (.*);
  function automatic cvm_entry_t rnd();
    logic [$bits(cvm_entry_t)-1:0] v;
    for (int i = 0; i < $bits(cvm_entry_t); i += 32) v[i +: 32] = $urandom;
    return cvm_entry_t'(v);
  endfunction
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 297; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 9'(i); wr_data = rnd(); refm[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 297; i += 5) begin
      @(negedge clk); rd_en = 1; rd_addr = 9'(i);
      @(negedge clk); rd_en = 0;
      checks++; if (rd_data !== refm[i]) begin failures++; $display("FAIL %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
