// cvmem: ConMerge vector memory, 50 KB.
//
// Holds one entry per merged block produced by the ConMerge vector generator:
// the 16 conflict vectors, the 16x16 control maps and the weight column origin
// indices of the three weight buffers (1376 bits, a layout of this design).
// 50 KB holds 297 such entries. Write from the CAU, read by the SDUE
// sequencer with a one-cycle latency.
module cvmem
  import exion_pkg::*;
#(
  parameter int DEPTH = 297,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  cvm_entry_t    wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output cvm_entry_t    rd_data
);
  logic [$bits(cvm_entry_t)-1:0] q;
  sram_2p #(.DEPTH(DEPTH), .WIDTH($bits(cvm_entry_t))) u_ram (
    .clk, .wr_en, .wr_addr, .wr_data(wr_data), .rd_en, .rd_addr, .rd_data(q));
  assign rd_data = cvm_entry_t'(q);
endmodule
