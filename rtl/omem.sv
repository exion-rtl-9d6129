// omem: output memory of a DSC.
//
// 16 banks of 1.5 KB (paper's configuration table); bank r takes the outputs
// of DPU lane r. A word is the 16 outputs of one lane, 16 bit each (256 bit),
// so a bank holds 48 words. Two buffers are kept so that results can be
// written back to the global scratchpad while the next tile is computed (the
// paper draws OMEM stacked like the other buffered memories but gives no
// count). A whole row of 16 bank words is written in one cycle when a tile
// finishes; single words are read for write-back or by the CFSE, one cycle
// after rd_en.
module omem
  import exion_pkg::*;
#(
  parameter int NBUF  = 2,
  parameter int NBANK = LANES,
  parameter int DEPTH = 48,
  localparam int AW = $clog2(DEPTH),
  localparam int BW = (NBUF > 1) ? $clog2(NBUF) : 1
) (
  input  logic          clk,
  input  logic          row_wr_en,
  input  logic [BW-1:0] row_wr_buf,
  input  logic [AW-1:0] row_wr_addr,
  input  gword_t        row_wr_data [NBANK],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output gword_t        rd_data [NBUF][NBANK]
);
  banked_mem #(.NBUF(NBUF), .NBANK(NBANK), .DEPTH(DEPTH), .WIDTH(GW)) u_mem (
    .clk, .wr_en(1'b0), .wr_buf('0), .wr_bank('0), .wr_addr('0), .wr_data('0),
    .row_wr_en, .row_wr_buf, .row_wr_addr, .row_wr_data,
    .rd_en, .rd_addr, .rd_data);
endmodule
