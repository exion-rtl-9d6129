// ld_dpu: log-domain dot-product unit of the eager prediction engine.
//
// Each of the 16 element pairs arrives as two-step leading-one positions. The
// low-precision adders add the positions of the input and weight (four sums,
// since each operand carries two ones), the shifter turns each sum s into the
// one-hot value 2^(2*(MAG_W-1) - s) (the paper's "2 << ((2*DW-2) - s)" rule
// with positions from the MSB), and because shifter outputs are one-hot the
// four terms are combined by OR gates, the paper's one-hot data adder tree.
// Two terms of equal weight therefore count once, a small under-estimate that
// the prediction tolerates. The 16 signed products are then summed (16-to-1
// adder tree) and accumulated.
//
// Timing: as the DPU, 'en' qualifies a chunk and 'clr' marks the first one;
// 'acc' is the register.
module ld_dpu
  import exion_pkg::*;
#(
  parameter int N = LANE_LEN
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic                       clr,
  input  ts_lod_t                    a [N],
  input  ts_lod_t                    b [N],
  output logic signed [LD_ACC_W-1:0] acc
);
  localparam int EMAX = 2 * (MAG_W - 1);   // largest exponent (20)
  localparam int OH_W = EMAX + 1;

  function automatic logic [OH_W-1:0] onehot(input logic v, input logic [POS_W:0] s);
    logic [OH_W-1:0] r;
    r = '0;
    if (v && s <= (POS_W+1)'(EMAX)) r[EMAX - int'(s)] = 1'b1;
    return r;
  endfunction

  logic signed [LD_ACC_W-1:0] psum;
  always_comb begin
    psum = '0;
    for (int i = 0; i < N; i++) begin
      logic [OH_W-1:0] mag;
      mag = onehot(a[i].v1 && b[i].v1, {1'b0, a[i].p1} + {1'b0, b[i].p1})
          | onehot(a[i].v1 && b[i].v2, {1'b0, a[i].p1} + {1'b0, b[i].p2})
          | onehot(a[i].v2 && b[i].v1, {1'b0, a[i].p2} + {1'b0, b[i].p1})
          | onehot(a[i].v2 && b[i].v2, {1'b0, a[i].p2} + {1'b0, b[i].p2});
      if (a[i].sign ^ b[i].sign) psum -= LD_ACC_W'(mag);
      else                       psum += LD_ACC_W'(mag);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= clr ? psum : acc + psum;
  end
endmodule
