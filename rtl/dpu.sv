// dpu: dot-product unit of the sparse-dense unified engine (SDUE).
//
// Every cycle in which it is enabled the DPU multiplies 16 INT12 inputs by 16
// INT12 weights, adds the 16 products (the paper uses a Wallace tree; here the
// sum is written behaviourally and left to synthesis) and accumulates the sum.
// Its two switches follow the paper: the input switch (i_sw, 2-to-1) picks the
// original line (IMEM bank of its own lane) or the conflict line (the bank its
// lane's conflict vector selects), and the weight switch (w_sw, 3-to-1) picks
// the weight line of WMEM #0, #1 or #2. Both come from the DPU's control map.
// A control map that selects no weight leaves the DPU idle; the paper clock
// gates the datapath registers, modelled here by the register enable.
//
// Timing: 'clr' marks the first chunk of a dot product (the accumulator is
// loaded rather than added to). 'result' is combinational from the
// accumulator: acc * scale >>> shift, saturated to 16 bit; the paper shows a
// scale-factor multiplier, the shift and saturation are this design's.
module dpu
  import exion_pkg::*;
#(
  parameter int N = LANE_LEN
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  logic [N*DW-1:0]         orig_in,
  input  logic [N*DW-1:0]         conf_in,
  input  logic [N*DW-1:0]         w_in [NWBUF],
  input  cm_t                     cm,
  input  logic [15:0]             scale,
  input  logic [4:0]              shift,
  output logic signed [ACC_W-1:0] acc,
  output out_t                    result
);
  logic [N*DW-1:0] x, w;
  logic            active;
  logic signed [ACC_W-1:0] psum;

  // i_sw and w_sw
  always_comb begin
    x = cm.isel ? conf_in : orig_in;
    unique case (cm.wsel)
      2'd1:    w = w_in[0];
      2'd2:    w = w_in[1];
      2'd3:    w = w_in[2];
      default: w = '0;
    endcase
    active = (cm.wsel != 2'd0);
  end

  // multipliers and adder tree
  always_comb begin
    psum = '0;
    for (int i = 0; i < N; i++)
      psum += ACC_W'(data_t'(x[i*DW +: DW]) * data_t'(w[i*DW +: DW]));
  end

  // accumulation registers (enable = clock gate)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  acc <= '0;
    else if (en && active)       acc <= clr ? psum : acc + psum;
    else if (en && clr)          acc <= '0;
  end

  // scale factor
  logic signed [63:0] scaled;
  always_comb begin
    scaled = (64'(acc) * $signed({48'd0, scale})) >>> shift;
    result = sat16(scaled);
  end
endmodule
