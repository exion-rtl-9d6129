// shared_bus: the DSC's shared bus for local memory writes.
//
// Two requesters write the DSC's IMEM and operand memory: the network-on-chip
// (tiles arriving from the global scratchpad) and the configurable SIMD engine
// (results of special functions that feed the next MMUL, or operands). One
// write passes per cycle. The network-on-chip has fixed priority because it
// cannot be stalled per DSC when it broadcasts; the SIMD engine waits while it
// is not granted. The paper names the bus; its arbitration is this design's.
module shared_bus
  import exion_pkg::*;
(
  input  logic        noc_valid,
  input  noc_tgt_e    noc_tgt,
  input  logic [1:0]  noc_buf,
  input  logic [3:0]  noc_bank,
  input  logic [11:0] noc_addr,
  input  gword_t      noc_data,
  input  logic        cfse_valid,
  input  noc_tgt_e    cfse_tgt,
  input  logic [1:0]  cfse_buf,
  input  logic [3:0]  cfse_bank,
  input  logic [11:0] cfse_addr,
  input  gword_t      cfse_data,
  output logic        cfse_grant,
  output logic        out_valid,
  output noc_tgt_e    out_tgt,
  output logic [1:0]  out_buf,
  output logic [3:0]  out_bank,
  output logic [11:0] out_addr,
  output gword_t      out_data
);
  always_comb begin
    cfse_grant = cfse_valid && !noc_valid;
    if (noc_valid) begin
      out_valid = 1'b1; out_tgt = noc_tgt; out_buf = noc_buf;
      out_bank = noc_bank; out_addr = noc_addr; out_data = noc_data;
    end else begin
      out_valid = cfse_valid; out_tgt = cfse_tgt; out_buf = cfse_buf;
      out_bank = cfse_bank; out_addr = cfse_addr; out_data = cfse_data;
    end
  end
endmodule
