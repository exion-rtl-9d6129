// imem: input memory of a DSC.
//
// Double buffered (one buffer is filled over the network-on-chip while the
// other feeds the SDUE and EPRE), 16 banks of 1.5 KB per buffer as in the
// paper's configuration table. A word holds 16 INT12 elements (192 bit), the
// slice of one input row that a DPU consumes in one cycle, so a bank holds 64
// words: an input row of up to 1024 elements. Bank r drives the original
// line of DPU lane r and is one of the 16 choices of every conflict-vector
// switch. Reads return all banks of both buffers one cycle after rd_en.
module imem
  import exion_pkg::*;
#(
  parameter int NBUF  = NIBUF,
  parameter int NBANK = LANES,
  parameter int DEPTH = 64,
  localparam int AW = $clog2(DEPTH),
  localparam int BW = (NBUF > 1) ? $clog2(NBUF) : 1,
  localparam int KW = $clog2(NBANK)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [BW-1:0] wr_buf,
  input  logic [KW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  vec_t          wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output vec_t          rd_data [NBUF][NBANK]
);
  vec_t row_unused [NBANK];
  always_comb for (int k = 0; k < NBANK; k++) row_unused[k] = '0;

  banked_mem #(.NBUF(NBUF), .NBANK(NBANK), .DEPTH(DEPTH), .WIDTH(VEC_W)) u_mem (
    .clk, .wr_en, .wr_buf, .wr_bank, .wr_addr, .wr_data,
    .row_wr_en(1'b0), .row_wr_buf('0), .row_wr_addr('0), .row_wr_data(row_unused),
    .rd_en, .rd_addr, .rd_data);
endmodule
