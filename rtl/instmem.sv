// instmem: instruction memory of the top controller, 3 KB.
//
// 384 words of 64 bit (the instruction width is this design's choice). The
// host loads programs through the write port; the controller fetches with a
// one-cycle read latency.
module instmem
  import exion_pkg::*;
#(
  parameter int DEPTH = 384,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [63:0]   wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output instr_t        rd_data
);
  logic [63:0] q;
  sram_2p #(.DEPTH(DEPTH), .WIDTH(64)) u_ram (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data(q));
  assign rd_data = instr_t'(q);
endmodule
