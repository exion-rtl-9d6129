// exion_top: the EXION diffusion accelerator.
//
// A top controller with its instruction memory runs programs that move data
// from external DRAM into the global scratchpad (DMA with data aligner), from
// there over the network-on-chip into the local memories of N_DSC
// diffusion-sparsity aware cores, compute matrix tiles on the cores (dense or
// ConMerge-merged on the SDUE, log-domain prediction on the EPRE), build
// ConMerge vectors in the CAU, run SIMD steps on the CFSE, and write results
// back the same way. The block structure follows the paper's architecture
// figure; the default of one DSC with a 512 KB scratchpad is the single-core
// configuration whose area and power the paper reports.
//
// Interface: the host writes the program through imem_wr_* and pulses
// 'start'; 'done' rises when the program reaches HALT. The DRAM port is the
// DMA's (64-bit beats, valid/ready requests, in-order read responses).
// 'stats' gives each DSC's activity counters.
module exion_top
  import exion_pkg::*;
#(
  parameter int N_DSC     = 1,
  parameter int GSC_DEPTH = 16384,
  parameter int IM_DEPTH  = 64,
  parameter int WM_DEPTH  = 512,
  parameter int OM_DEPTH  = 48,
  parameter int CV_DEPTH  = 297,
  parameter int OPM_DEPTH = 3072,
  parameter int SB_DEPTH  = 32,
  parameter int INST_DEPTH = 384,
  localparam int GAW = $clog2(GSC_DEPTH),
  localparam int IAW = $clog2(INST_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // program load and control
  input  logic           imem_wr_en,
  input  logic [IAW-1:0] imem_wr_addr,
  input  logic [63:0]    imem_wr_data,
  input  logic           start,
  output logic           done,
  output logic           running,
  // external DRAM
  output logic           dram_req_valid,
  input  logic           dram_req_ready,
  output logic           dram_req_we,
  output logic [31:0]    dram_req_addr,
  output logic [63:0]    dram_req_wdata,
  input  logic           dram_rsp_valid,
  input  logic [63:0]    dram_rsp_rdata,
  // observation
  output logic [15:0]    n_instr,
  output dsc_stats_t     stats [N_DSC]
);
  // instruction memory
  logic if_en; logic [IAW-1:0] if_addr; instr_t if_data;
  instmem #(.DEPTH(INST_DEPTH)) u_instmem (
    .clk, .wr_en(imem_wr_en), .wr_addr(imem_wr_addr), .wr_data(imem_wr_data),
    .rd_en(if_en), .rd_addr(if_addr), .rd_data(if_data));

  // controller
  logic dma_start, dma_dir, dma_done, dma_busy;
  logic [31:0] dma_dram; logic [GAW-1:0] dma_gsc; logic [15:0] dma_len;
  logic ld_start, st_start, noc_done, noc_busy;
  logic [GAW-1:0] noc_gaddr; logic [15:0] noc_len; logic [N_DSC-1:0] noc_mask;
  noc_tgt_e ld_tgt; logic [1:0] ld_buf; logic [3:0] ld_bank; logic [11:0] ld_laddr; logic ld_spread;
  logic [N_DSC-1:0] dsc_valid, dsc_done;
  dsc_cmd_t dsc_cmd;

  top_ctrl #(.N_DSC(N_DSC), .IAW(IAW), .GAW(GAW)) u_ctrl (
    .clk, .rst_n, .start, .halted(done), .running,
    .if_en, .if_addr, .if_data,
    .dma_start, .dma_dir, .dma_dram, .dma_gsc, .dma_len, .dma_done,
    .ld_start, .st_start, .noc_gaddr, .noc_len, .noc_mask, .ld_tgt, .ld_buf, .ld_bank,
    .ld_laddr, .ld_spread, .noc_done, .dsc_valid, .dsc_cmd, .dsc_done, .n_instr);

  // DMA and global scratchpad
  logic a_en, a_we; logic [GAW-1:0] a_addr; gword_t a_wdata, a_rdata;
  logic b_en, b_we; logic [GAW-1:0] b_addr; gword_t b_wdata, b_rdata;

  dma #(.GAW(GAW)) u_dma (
    .clk, .rst_n, .start(dma_start), .dir(dma_dir), .dram_addr(dma_dram), .gsc_addr(dma_gsc),
    .len(dma_len), .busy(dma_busy), .done(dma_done),
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_we(dram_req_we),
    .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata),
    .g_en(a_en), .g_we(a_we), .g_addr(a_addr), .g_wdata(a_wdata), .g_rdata(a_rdata));

  gsc #(.DEPTH(GSC_DEPTH)) u_gsc (
    .clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  // network-on-chip
  logic [N_DSC-1:0] fill_valid;
  noc_tgt_e fill_tgt; logic [1:0] fill_buf; logic [3:0] fill_bank; logic [11:0] fill_addr;
  gword_t fill_data;
  logic   st_valid [N_DSC]; logic [9:0] st_idx [N_DSC]; gword_t st_data [N_DSC];
  logic   st_ready [N_DSC];

  noc #(.N_DSC(N_DSC), .GAW(GAW)) u_noc (
    .clk, .rst_n, .ld_start, .ld_gaddr(noc_gaddr), .ld_len(noc_len), .ld_mask(noc_mask),
    .ld_tgt, .ld_buf, .ld_bank, .ld_laddr, .ld_spread,
    .st_start, .st_gaddr(noc_gaddr), .st_len(noc_len), .st_mask(noc_mask),
    .busy(noc_busy), .done(noc_done),
    .g_en(b_en), .g_we(b_we), .g_addr(b_addr), .g_wdata(b_wdata), .g_rdata(b_rdata),
    .fill_valid, .fill_tgt, .fill_buf, .fill_bank, .fill_addr, .fill_data,
    .dsc_st_valid(st_valid), .dsc_st_idx(st_idx), .dsc_st_data(st_data), .dsc_st_ready(st_ready));

  // cores
  for (genvar d = 0; d < N_DSC; d++) begin : g_dsc
    logic busy_unused;
    dsc #(.IM_DEPTH(IM_DEPTH), .WM_DEPTH(WM_DEPTH), .OM_DEPTH(OM_DEPTH), .CV_DEPTH(CV_DEPTH),
          .OPM_DEPTH(OPM_DEPTH), .SB_DEPTH(SB_DEPTH)) u_dsc (
      .clk, .rst_n, .cmd_valid(dsc_valid[d]), .cmd(dsc_cmd), .busy(busy_unused), .done(dsc_done[d]),
      .fill_valid(fill_valid[d]), .fill_tgt, .fill_buf, .fill_bank, .fill_addr, .fill_data,
      .st_valid(st_valid[d]), .st_idx(st_idx[d]), .st_data(st_data[d]), .st_ready(st_ready[d]),
      .n_dense(stats[d].n_dense), .n_merged(stats[d].n_merged), .n_conf_line(stats[d].n_conf_line),
      .n_ep(stats[d].n_ep), .n_ep_onehot(stats[d].n_ep_onehot), .n_cv_blocks(stats[d].n_cv_blocks),
      .n_condensed(stats[d].n_condensed), .n_merge_ok(stats[d].n_merge_ok),
      .n_merge_fail(stats[d].n_merge_fail), .n_moves(stats[d].n_moves), .n_spill(stats[d].n_spill),
      .sb_overflow(stats[d].sb_overflow), .n_bus_stall(stats[d].n_bus_stall));
  end

  logic unused;
  assign unused = ^{dma_busy, noc_busy};
endmodule
