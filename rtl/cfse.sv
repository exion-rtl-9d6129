// cfse: configurable SIMD engine of a DSC.
//
// Applies one element-wise operation to 'len' words of 256 bit. In 32-bit
// mode a word is eight 32-bit elements handled by the eight ALUs; in split
// mode each ALU works as two 16-bit lanes, so a word is sixteen 16-bit
// elements, twice the element rate. Operand A comes from the operand memory
// or from OMEM (word i of OMEM is bank i%16, address i/16, the layout in which
// the SDUE wrote it); operand B from the operand memory or a scalar broadcast.
// Results go to the operand memory or, through the shared bus, to IMEM
// (each 16-bit element cut to INT12) so that they feed the next MMUL.
//
// The paper lists layer normalisation, Softmax, non-linear functions and
// residual addition as the CFSE's work but not how they are computed; this
// engine provides the element-wise steps (add for residuals, max/relu, mul,
// compare) and not exp, division or square root.
//
// Timing: two-stage pipeline, one word per cycle. Reads are issued in stage 1;
// stage 2 computes and writes. A write to IMEM waits for the shared-bus grant,
// which stalls the pipeline. 'done' pulses when the last word is written.
module cfse
  import exion_pkg::*;
#(
  parameter int NALU = GW / 32,
  parameter int OPM_AW = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  alu_op_e     op,
  input  logic        split,
  input  cfse_src_e   srca,
  input  cfse_src_e   srcb,
  input  cfse_dst_e   dst,
  input  logic [11:0] ca,
  input  logic [11:0] cb,
  input  logic [11:0] cd,
  input  logic [9:0]  len,
  input  logic [31:0] imm,
  input  logic        ibuf,
  input  logic        obuf,
  output logic        busy,
  output logic        done,
  // operand memory
  output logic        opm_rda_en,
  output logic [OPM_AW-1:0] opm_rda_addr,
  input  gword_t      opm_rda_data,
  output logic        opm_rdb_en,
  output logic [OPM_AW-1:0] opm_rdb_addr,
  input  gword_t      opm_rdb_data,
  // OMEM read (all banks of both buffers returned)
  output logic        om_rd_en,
  output logic [5:0]  om_rd_addr,
  input  gword_t      om_rd_data [2][LANES],
  // writes through the shared bus
  output logic        wr_valid,
  output noc_tgt_e    wr_tgt,
  output logic [1:0]  wr_buf,
  output logic [3:0]  wr_bank,
  output logic [11:0] wr_addr,
  output gword_t      wr_data,
  input  logic        wr_grant
);
  logic [9:0]  issued;      // words whose reads have been issued
  logic [9:0]  idx2;        // index of the word in stage 2
  logic        v2, stall, issue;
  gword_t      a_w, b_w;
  logic [31:0] y_alu [NALU];

  assign stall = v2 && !wr_grant;
  assign issue = busy && (issued != len) && !stall;

  always_comb begin
    opm_rda_en   = issue && srca == CS_OPMEM;
    opm_rda_addr = OPM_AW'(ca + 12'(issued));
    opm_rdb_en   = issue && srcb == CS_OPMEM;
    opm_rdb_addr = OPM_AW'(cb + 12'(issued));
    om_rd_en     = issue && srca == CS_OMEM;
    om_rd_addr   = 6'(ca[5:0] + 6'(issued >> 4));
  end

  always_comb begin
    a_w = (srca == CS_OMEM) ? om_rd_data[obuf][idx2[3:0]] : opm_rda_data;
    if (srcb == CS_IMM) begin
      for (int i = 0; i < NALU; i++) b_w[i*32 +: 32] = split ? {imm[15:0], imm[15:0]} : imm;
    end else b_w = opm_rdb_data;
  end

  for (genvar i = 0; i < NALU; i++) begin : g_alu
    cfse_alu u_alu (.op, .split, .a(a_w[i*32 +: 32]), .b(b_w[i*32 +: 32]), .y(y_alu[i]));
  end
  gword_t y_cat;
  always_comb for (int i = 0; i < NALU; i++) y_cat[i*32 +: 32] = y_alu[i];

  always_comb begin
    wr_valid = v2;
    wr_tgt   = (dst == CD_IMEM) ? T_IMEM : T_OPMEM;
    wr_buf   = {1'b0, ibuf};
    wr_bank  = (dst == CD_IMEM) ? idx2[3:0] : 4'd0;
    wr_addr  = (dst == CD_IMEM) ? 12'(cd + 12'(idx2 >> 4)) : 12'(cd + 12'(idx2));
    wr_data  = y_cat;   // cut to INT12 by the DSC when it goes to IMEM
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; issued <= '0; idx2 <= '0; v2 <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= (len != 0); issued <= '0; v2 <= 1'b0;
        done <= (len == 0);
      end else if (busy) begin
        if (!stall) begin
          v2   <= issue;
          idx2 <= issued;
          if (issue) issued <= issued + 1'b1;
          if (v2 && 10'(idx2 + 1'b1) == len) begin
            busy <= 1'b0; done <= 1'b1; v2 <= 1'b0;
          end
        end
      end
    end
  end
endmodule
