// tb_sparsity_classifier: every 16-bit mask, checking the popcount, the
// class boundaries and the drop flag for all-zero masks.
module tb_sparsity_classifier;
  import exion_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0] mask; sp_class_e cls; logic [4:0] ones; logic drop;
  sparsity_classifier dut (.*);
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int m = 0; m < 65536; m++) begin
      int n; sp_class_e e;
      mask = 16'(m); #1;
      n = $countones(mask);
      e = (n >= 12) ? CL_HDENSE : (n >= 8) ? CL_DENSE : (n >= 4) ? CL_SPARSE : CL_HSPARSE;
      checks++;
      if (int'(ones) != n || cls != e || drop != (n == 0)) begin
        failures++; if (failures < 10) $display("FAIL %h", mask);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
