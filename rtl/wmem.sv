// wmem: weight memory of a DSC, WMEM #0..#2.
//
// Triple buffered as in the paper: merging puts up to three blocks of output
// columns into one DPU array pass, and each of the three source blocks has its
// weight columns in its own WMEM. Each WMEM has 16 banks of 12 KB; bank c of
// all three WMEMs is broadcast to DPU column c, where the weight switch picks
// one. A word is 16 INT12 weights of one weight column (192 bit), so a bank
// holds 512 words. Reads return all banks of all buffers one cycle after rd_en.
module wmem
  import exion_pkg::*;
#(
  parameter int NBUF  = NWBUF,
  parameter int NBANK = COLS,
  parameter int DEPTH = 512,
  localparam int AW = $clog2(DEPTH),
  localparam int BW = $clog2(NBUF),
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
