// sram_2p: generic on-chip SRAM model with one write port and one read port.
//
// A plain array with a registered read: rd_data shows the word at rd_addr
// one clock after rd_en. A write and a read of the same address in the same
// cycle return the old word. The contents are not reset (as in an SRAM
// macro); every memory block of the accelerator is built from this array.
module sram_2p #(
  parameter int DEPTH = 64,
  parameter int WIDTH = 32,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
