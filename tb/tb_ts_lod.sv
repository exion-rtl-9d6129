// tb_ts_lod: checks two-step leading-one detection for every INT12 value
// against a reference that scans the magnitude bit by bit, plus the worked
// values 2, 3 and 5 of the paper's log-domain examples.
module tb_ts_lod;
  import exion_pkg::*;
  int checks = 0, failures = 0;
  data_t x; ts_lod_t y;
  ts_lod dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int v = -2048; v < 2048; v++) begin
      int mag, p1, p2; bit v1, v2;
      x = data_t'(v); #1;
      mag = (v < 0) ? -v : v; if (mag > 2047) mag = 2047;
      v1 = 0; v2 = 0; p1 = 0; p2 = 0;
      for (int i = 10; i >= 0; i--) if (mag[i]) begin
        if (!v1) begin v1 = 1; p1 = 10 - i; end else if (!v2) begin v2 = 1; p2 = 10 - i; end
      end
      checks++;
      if (y.sign != (v < 0) || y.v1 != v1 || y.v2 != v2 || (v1 && y.p1 != p1) || (v2 && y.p2 != p2)) begin
        failures++; if (failures < 10) $display("FAIL v=%0d got %p", v, y);
      end
    end
    // 3 = 0..011: ones at positions 9 and 10 from the MSB of 11 bits
    x = 12'sd3; #1; checks++; if (!(y.v1 && y.p1 == 9 && y.v2 && y.p2 == 10)) begin failures++; $display("FAIL 3"); end
    x = 12'sd5; #1; checks++; if (!(y.v1 && y.p1 == 8 && y.v2 && y.p2 == 10)) begin failures++; $display("FAIL 5"); end
    x = 12'sd2; #1; checks++; if (!(y.v1 && y.p1 == 9 && !y.v2)) begin failures++; $display("FAIL 2"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
