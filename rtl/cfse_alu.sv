// cfse_alu: configurable arithmetic unit of the SIMD engine.
//
// One 32-bit lane, or (split = 1) two independent 16-bit lanes, giving the
// paper's "one-way 32-bit or two-way 16-bit" ALU with double element
// throughput in 16-bit mode. All arithmetic is signed two's complement;
// MUL keeps the low half of the product, CMPGT returns 1 or 0 per lane, RELU
// clamps negative a to zero, PASS returns a. The op set is this design's
// choice. Purely combinational.
module cfse_alu
  import exion_pkg::*;
(
  input  alu_op_e     op,
  input  logic        split,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  function automatic logic [15:0] f16(input alu_op_e o, input logic signed [15:0] x,
                                      input logic signed [15:0] z);
    logic signed [31:0] p;
    p = x * z;
    unique case (o)
      ALU_ADD:   return x + z;
      ALU_SUB:   return x - z;
      ALU_MUL:   return p[15:0];
      ALU_MAX:   return (x > z) ? x : z;
      ALU_MIN:   return (x < z) ? x : z;
      ALU_RELU:  return (x < 0) ? 16'd0 : x;
      ALU_CMPGT: return {15'd0, x > z};
      default:   return x;
    endcase
  endfunction

  function automatic logic [31:0] f32(input alu_op_e o, input logic signed [31:0] x,
                                      input logic signed [31:0] z);
    logic signed [63:0] p;
    p = x * z;
    unique case (o)
      ALU_ADD:   return x + z;
      ALU_SUB:   return x - z;
      ALU_MUL:   return p[31:0];
      ALU_MAX:   return (x > z) ? x : z;
      ALU_MIN:   return (x < z) ? x : z;
      ALU_RELU:  return (x < 0) ? 32'd0 : x;
      ALU_CMPGT: return {31'd0, x > z};
      default:   return x;
    endcase
  endfunction

  always_comb begin
    if (split) y = {f16(op, a[31:16], b[31:16]), f16(op, a[15:0], b[15:0])};
    else       y = f32(op, a, b);
  end
endmodule
