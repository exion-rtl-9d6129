// noc: network-on-chip between the global scratchpad and the DSCs.
//
// Loads: reads 'ld_len' consecutive GSC words, one per cycle, and delivers
// each, one cycle later, to every DSC in 'ld_mask' at once: a single bit is a
// unicast, several bits a broadcast (the paper's "unicasts or broadcasts the
// input and weight"). The local address is ld_laddr+i in bank ld_bank, or,
// with ld_spread, bank i%16 at ld_laddr+i/16 (a whole 16-bank tile in one
// transfer).
// Stores: every DSC in 'st_mask' streams st_len words; a round-robin arbiter
// grants one DSC per cycle and writes its word i to GSC address
// st_gaddr + d*st_len + i, d being the DSC's number. The topology is not
// given in the paper; this bus-with-arbiter is the simplest that does the
// job for any number of DSCs.
module noc
  import exion_pkg::*;
#(
  parameter int N_DSC = 1,
  parameter int GAW   = 14
) (
  input  logic           clk,
  input  logic           rst_n,
  // load command
  input  logic           ld_start,
  input  logic [GAW-1:0] ld_gaddr,
  input  logic [15:0]    ld_len,
  input  logic [N_DSC-1:0] ld_mask,
  input  noc_tgt_e       ld_tgt,
  input  logic [1:0]     ld_buf,
  input  logic [3:0]     ld_bank,
  input  logic [11:0]    ld_laddr,
  input  logic           ld_spread,
  // store command
  input  logic           st_start,
  input  logic [GAW-1:0] st_gaddr,
  input  logic [15:0]    st_len,
  input  logic [N_DSC-1:0] st_mask,
  output logic           busy,
  output logic           done,
  // GSC port B
  output logic           g_en,
  output logic           g_we,
  output logic [GAW-1:0] g_addr,
  output gword_t         g_wdata,
  input  gword_t         g_rdata,
  // DSC fill ports (shared data, per-DSC valid)
  output logic [N_DSC-1:0] fill_valid,
  output noc_tgt_e       fill_tgt,
  output logic [1:0]     fill_buf,
  output logic [3:0]     fill_bank,
  output logic [11:0]    fill_addr,
  output gword_t         fill_data,
  // DSC store streams
  input  logic           dsc_st_valid [N_DSC],
  input  logic [9:0]     dsc_st_idx   [N_DSC],
  input  gword_t         dsc_st_data  [N_DSC],
  output logic           dsc_st_ready [N_DSC]
);
  localparam int DW_ = (N_DSC > 1) ? $clog2(N_DSC) : 1;
  typedef enum logic [1:0] {N_IDLE, N_LD, N_ST} nstate_e;
  nstate_e state;

  logic [15:0] cnt, len_q;
  logic [GAW-1:0] base_q;
  logic [N_DSC-1:0] mask_q;
  noc_tgt_e tgt_q; logic [1:0] buf_q; logic [3:0] bank_q; logic [11:0] laddr_q; logic spread_q;
  logic        v1; logic [15:0] i1;
  logic [31:0] st_total, st_cnt;
  logic [DW_-1:0] rr, gnt;
  logic           gnt_v;

  assign busy = (state != N_IDLE);

  // round-robin arbiter
  always_comb begin
    gnt = '0; gnt_v = 1'b0;
    for (int k = N_DSC - 1; k >= 0; k--) begin
      int d;
      d = (int'(rr) + 1 + k) % N_DSC;
      if (state == N_ST && mask_q[d] && dsc_st_valid[d]) begin gnt = DW_'(d); gnt_v = 1'b1; end
    end
    for (int d = 0; d < N_DSC; d++) dsc_st_ready[d] = gnt_v && gnt == DW_'(d);
  end

  always_comb begin
    g_en = 1'b0; g_we = 1'b0; g_addr = base_q + GAW'(cnt); g_wdata = '0;
    if (state == N_LD && cnt != len_q) g_en = 1'b1;
    if (gnt_v) begin
      g_en = 1'b1; g_we = 1'b1;
      g_addr = base_q + GAW'(32'(gnt) * 32'(len_q)) + GAW'(dsc_st_idx[gnt]);
      g_wdata = dsc_st_data[gnt];
    end
    fill_valid = v1 ? mask_q : '0;
    fill_tgt   = tgt_q;
    fill_buf   = buf_q;
    fill_bank  = spread_q ? i1[3:0] : bank_q;
    fill_addr  = spread_q ? laddr_q + 12'(i1 >> 4) : laddr_q + 12'(i1);
    fill_data  = g_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= N_IDLE; done <= 1'b0; cnt <= '0; len_q <= '0; base_q <= '0; mask_q <= '0;
      tgt_q <= T_IMEM; buf_q <= '0; bank_q <= '0; laddr_q <= '0; spread_q <= 1'b0;
      v1 <= 1'b0; i1 <= '0; st_total <= '0; st_cnt <= '0; rr <= '0;
    end else begin
      done <= 1'b0;
      v1   <= (state == N_LD) && cnt != len_q;
      i1   <= cnt;
      unique case (state)
        N_IDLE: begin
          if (ld_start) begin
            state <= N_LD; cnt <= '0; len_q <= ld_len; base_q <= ld_gaddr; mask_q <= ld_mask;
            tgt_q <= ld_tgt; buf_q <= ld_buf; bank_q <= ld_bank; laddr_q <= ld_laddr;
            spread_q <= ld_spread;
          end else if (st_start) begin
            int n;
            n = 0;
            for (int d = 0; d < N_DSC; d++) n += int'(st_mask[d]);
            state <= N_ST; st_cnt <= '0; st_total <= 32'(n) * 32'(st_len);
            len_q <= st_len; base_q <= st_gaddr; mask_q <= st_mask;
            if (n == 0 || st_len == 0) begin state <= N_IDLE; done <= 1'b1; end
          end
        end
        N_LD: begin
          if (cnt != len_q) cnt <= cnt + 1'b1;
          else if (!v1) begin state <= N_IDLE; done <= 1'b1; end
        end
        N_ST: if (gnt_v) begin
          rr     <= gnt;
          st_cnt <= st_cnt + 1'b1;
          if (st_cnt + 1'b1 == st_total) begin state <= N_IDLE; done <= 1'b1; end
        end
        default: state <= N_IDLE;
      endcase
    end
  end
endmodule
