// banked_mem: NBUF buffers of NBANK banks each, the organisation shared by
// IMEM (2 buffers), WMEM (3 buffers) and OMEM (2 buffers).
//
// Reads address the same word in every bank of every buffer at once, which is
// how the SDUE consumes them: bank r of IMEM drives DPU lane r, bank c of each
// WMEM drives DPU column c. Data is valid one cycle after rd_en.
// Writes come either one bank word at a time (fills from the network-on-chip
// or the shared bus) or one word in every bank of a buffer at once (a row of
// DPU results); the row write wins if both address the same bank.
module banked_mem #(
  parameter int NBUF  = 2,
  parameter int NBANK = 16,
  parameter int DEPTH = 64,
  parameter int WIDTH = 192,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int BW = (NBUF > 1) ? $clog2(NBUF) : 1,
  localparam int KW = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic             clk,
  // single-bank write
  input  logic             wr_en,
  input  logic [BW-1:0]    wr_buf,
  input  logic [KW-1:0]    wr_bank,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  // whole-row write (one word per bank)
  input  logic             row_wr_en,
  input  logic [BW-1:0]    row_wr_buf,
  input  logic [AW-1:0]    row_wr_addr,
  input  logic [WIDTH-1:0] row_wr_data [NBANK],
  // read of all banks of all buffers
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data [NBUF][NBANK]
);
  for (genvar b = 0; b < NBUF; b++) begin : g_buf
    for (genvar k = 0; k < NBANK; k++) begin : g_bank
      logic             we;
      logic [AW-1:0]    wa;
      logic [WIDTH-1:0] wd;
      always_comb begin
        if (row_wr_en && row_wr_buf == BW'(b)) begin
          we = 1'b1; wa = row_wr_addr; wd = row_wr_data[k];
        end else begin
          we = wr_en && wr_buf == BW'(b) && wr_bank == KW'(k);
          wa = wr_addr; wd = wr_data;
        end
      end
      sram_2p #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_ram (
        .clk, .wr_en(we), .wr_addr(wa), .wr_data(wd),
        .rd_en, .rd_addr, .rd_data(rd_data[b][k]));
    end
  end
endmodule
