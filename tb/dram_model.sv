// dram_model: behavioural external DRAM for testbenches.
//
// DEPTH 64-bit beats. A request is accepted when req_valid && req_ready;
// 'req_ready' is randomly withheld about one cycle in four. Writes update the
// array at once; reads return in request order LAT cycles after acceptance.
// Testbenches preload and inspect 'mem' directly.
module dram_model #(
  parameter int DEPTH = 16384,
  parameter int LAT   = 6
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  logic [63:0] req_wdata,
  output logic        rsp_valid,
  output logic [63:0] rsp_rdata
);
  logic [63:0] mem [DEPTH];
  logic [63:0] pipe_d [LAT];
  logic        pipe_v [LAT];
  initial begin
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
    req_ready = 1'b1;
  end
  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= req_valid && req_ready && !req_we;
    pipe_d[0] <= mem[req_addr % DEPTH];
    if (req_valid && req_ready && req_we) mem[req_addr % DEPTH] <= req_wdata;
    req_ready <= ($urandom_range(0, 3) != 0);
  end
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_rdata = pipe_d[LAT-1];
endmodule
