// gsc: global scratchpad, 512 KB.
//
// 16384 words of 256 bit with two independent ports: port A serves the DMA
// (external DRAM side), port B the network-on-chip (DSC side). Each port
// either writes or reads in a cycle; reads return data one cycle later.
// Simultaneous writes of both ports to one address leave port B's word.
module gsc
  import exion_pkg::*;
#(
  parameter int DEPTH = 16384,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  gword_t        a_wdata,
  output gword_t        a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  gword_t        b_wdata,
  output gword_t        b_rdata
);
  gword_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
  end
endmodule
