// opmem: operand memories of the configurable SIMD engine, 96 KB.
//
// 3072 words of 256 bit (16 elements of 16 bit), with one write port and two
// read ports so that a two-operand SIMD instruction reads both operands in the
// same cycle (the paper gives only the total size). Read data is valid one
// cycle after the read enable.
module opmem
  import exion_pkg::*;
#(
  parameter int DEPTH = 3072,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  gword_t        wr_data,
  input  logic          rda_en,
  input  logic [AW-1:0] rda_addr,
  output gword_t        rda_data,
  input  logic          rdb_en,
  input  logic [AW-1:0] rdb_addr,
  output gword_t        rdb_data
);
  // two copies written together give two read ports
  sram_2p #(.DEPTH(DEPTH), .WIDTH(GW)) u_a (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_en(rda_en), .rd_addr(rda_addr), .rd_data(rda_data));
  sram_2p #(.DEPTH(DEPTH), .WIDTH(GW)) u_b (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_en(rdb_en), .rd_addr(rdb_addr), .rd_data(rdb_data));
endmodule
