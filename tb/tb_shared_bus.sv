// tb_shared_bus: checks that network-on-chip writes always pass, that the
// SIMD engine gets the bus only when the network-on-chip is idle, and that
// the winner's fields reach the output.
module tb_shared_bus;
  import exion_pkg::*;
  int checks = 0, failures = 0;
  logic noc_valid, cfse_valid, cfse_grant, out_valid;
  noc_tgt_e noc_tgt, cfse_tgt, out_tgt; logic [1:0] noc_buf, cfse_buf, out_buf;
  logic [3:0] noc_bank, cfse_bank, out_bank; logic [11:0] noc_addr, cfse_addr, out_addr;
  gword_t noc_data, cfse_data, out_data;
  shared_bus dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 200; t++) begin
      noc_valid = 1'($urandom); cfse_valid = 1'($urandom);
      noc_tgt = T_IMEM; cfse_tgt = T_OPMEM; noc_buf = 2'($urandom); cfse_buf = 2'($urandom);
      noc_bank = 4'($urandom); cfse_bank = 4'($urandom); noc_addr = 12'($urandom); cfse_addr = 12'($urandom);
      noc_data = {8{$urandom}}; cfse_data = {8{$urandom}};
      #1;
      checks++;
      if (out_valid != (noc_valid || cfse_valid) || cfse_grant != (cfse_valid && !noc_valid)) begin failures++; $display("FAIL grant t=%0d", t); end
      checks++;
      if (noc_valid ? (out_tgt != noc_tgt || out_addr != noc_addr || out_data != noc_data || out_bank != noc_bank || out_buf != noc_buf)
          : (cfse_valid && (out_tgt != cfse_tgt || out_addr != cfse_addr || out_data != cfse_data || out_bank != cfse_bank || out_buf != cfse_buf))) begin
        failures++; $display("FAIL data t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
