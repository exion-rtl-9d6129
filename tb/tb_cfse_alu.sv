// tb_cfse_alu: random operands for every op in 32-bit and split 16-bit mode
// against reference arithmetic.
module tb_cfse_alu;
  import exion_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op; logic split; logic [31:0] a, b, y;
  cfse_alu dut (.*);
  function automatic logic [31:0] r32(alu_op_e o, int x, int z);
    case (o)
      ALU_ADD: return x + z;  ALU_SUB: return x - z;  ALU_MUL: return x * z;
      ALU_MAX: return x > z ? x : z;  ALU_MIN: return x < z ? x : z;
      ALU_RELU: return x < 0 ? 0 : x;  ALU_CMPGT: return x > z ? 1 : 0;
      default: return x;
    endcase
  endfunction
  function automatic logic [15:0] r16(alu_op_e o, shortint x, shortint z);
    int w; w = int'(r32(o, int'(x), int'(z))); return w[15:0];
  endfunction
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [31:0] e;
      op = alu_op_e'(t % 8); split = t[3]; a = $urandom; b = $urandom;
      if (t % 16 < 4) begin a = a >>> 20; b = b >>> 20; end
      #1;
      e = split ? {r16(op, a[31:16], b[31:16]), r16(op, a[15:0], b[15:0])} : r32(op, a, b);
      checks++; if (y !== e) begin failures++; if (failures < 10) $display("FAIL op %0d split %0d a %h b %h y %h e %h", op, split, a, b, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
