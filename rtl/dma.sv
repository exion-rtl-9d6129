// dma: direct memory access engine with data aligner.
//
// Copies 'len' global-scratchpad words between external DRAM and the GSC.
// The DRAM port moves 64-bit beats; the data aligner packs four consecutive
// beats (lowest first) into one 256-bit GSC word on loads and unpacks a GSC
// word into four beats on stores. The paper names the DMA and the aligner;
// the widths and the DRAM handshake are this design's.
//
// DRAM port: a request is taken when req_valid && req_ready; read data
// returns in request order on rsp_valid, any number of cycles later.
// Loads issue requests back to back and write a GSC word whenever four beats
// have arrived; stores read a GSC word (one cycle) and then send its four
// beats. 'done' pulses when the last GSC word is written / the last beat is
// accepted.
module dma
  import exion_pkg::*;
#(
  parameter int GAW = 14
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           dir,        // 0: DRAM -> GSC, 1: GSC -> DRAM
  input  logic [31:0]    dram_addr,  // in 64-bit beats
  input  logic [GAW-1:0] gsc_addr,
  input  logic [15:0]    len,        // GSC words
  output logic           busy,
  output logic           done,
  // DRAM
  output logic           req_valid,
  input  logic           req_ready,
  output logic           req_we,
  output logic [31:0]    req_addr,
  output logic [63:0]    req_wdata,
  input  logic           rsp_valid,
  input  logic [63:0]    rsp_rdata,
  // GSC port A
  output logic           g_en,
  output logic           g_we,
  output logic [GAW-1:0] g_addr,
  output gword_t         g_wdata,
  input  gword_t         g_rdata
);
  typedef enum logic [2:0] {M_IDLE, M_LD, M_ST_RD, M_ST_WAIT, M_ST_SEND} mstate_e;
  mstate_e state;
  logic        d;
  logic [31:0] da;
  logic [GAW-1:0] ga;
  logic [17:0] nbeats, req_cnt, rsp_cnt;
  logic [15:0] words;
  logic [1:0]  beat;
  logic [63:0] pack [3];
  gword_t      st_word;

  assign busy = (state != M_IDLE);

  always_comb begin
    req_valid = 1'b0; req_we = d; req_addr = da + 32'(req_cnt); req_wdata = '0;
    g_en = 1'b0; g_we = 1'b0; g_addr = ga + GAW'(words); g_wdata = '0;
    unique case (state)
      M_LD: begin
        req_valid = (req_cnt != nbeats);
        g_en    = rsp_valid && beat == 2'd3;
        g_we    = 1'b1;
        g_addr  = ga + GAW'(rsp_cnt >> 2);
        g_wdata = {rsp_rdata, pack[2], pack[1], pack[0]};
      end
      M_ST_RD: begin g_en = 1'b1; g_we = 1'b0; end
      M_ST_SEND: begin
        req_valid = 1'b1;
        req_wdata = st_word[beat*64 +: 64];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE; done <= 1'b0; d <= 1'b0; da <= '0; ga <= '0;
      nbeats <= '0; req_cnt <= '0; rsp_cnt <= '0; words <= '0; beat <= '0;
      st_word <= '0;
      for (int i = 0; i < 3; i++) pack[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        M_IDLE: if (start) begin
          d <= dir; da <= dram_addr; ga <= gsc_addr;
          nbeats <= {len, 2'b00}; req_cnt <= '0; rsp_cnt <= '0; words <= '0; beat <= '0;
          if (len == 0) done <= 1'b1;
          else state <= dir ? M_ST_RD : M_LD;
        end
        M_LD: begin
          if (req_valid && req_ready) req_cnt <= req_cnt + 1'b1;
          if (rsp_valid) begin
            if (beat != 2'd3) pack[beat] <= rsp_rdata;
            beat    <= beat + 1'b1;
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt + 1'b1 == nbeats) begin done <= 1'b1; state <= M_IDLE; end
          end
        end
        M_ST_RD:   state <= M_ST_WAIT;
        M_ST_WAIT: begin st_word <= g_rdata; beat <= '0; state <= M_ST_SEND; end
        M_ST_SEND: if (req_ready) begin
          req_cnt <= req_cnt + 1'b1;
          beat    <= beat + 1'b1;
          if (beat == 2'd3) begin
            words <= words + 1'b1;
            if (words + 1'b1 == len) begin done <= 1'b1; state <= M_IDLE; end
            else state <= M_ST_RD;
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end
endmodule
