// dsc: diffusion-sparsity aware core.
//
// One core of the accelerator: IMEM (2 buffers), WMEM (3 buffers), OMEM,
// the SDUE, the eager prediction engine (EPRE), the ConMerge assistant unit
// (CAU) with its CVMEM, the configurable SIMD engine (CFSE) with its operand
// memory, and the shared bus. The block set and the data paths (IMEM rows and
// WMEM columns broadcast into the SDUE and EPRE, results into OMEM, column
// bitmasks into the CAU, CVMEM into the SDUE switches) follow the paper's
// architecture figure; the command sequencing is this design's.
//
// Commands (one at a time, 'cmd_valid' while idle, 'done' pulses at the end):
//  DC_MMUL   len K-chunks of IMEM[ibuf] x WMEM on the SDUE. Dense: every DPU
//            uses its own lane and WMEM[wbuf]. Merged: conflict vectors and
//            control maps from CVMEM[cvaddr]. The 16x16 result row goes to
//            OMEM[obuf] at oaddr; with mask_en the per-column bitmasks
//            (result > thr) and origin indices col_base+c go to the CAU.
//  DC_EPMM   same on the EPRE (log-domain prediction); the top-k column
//            masks go to the CAU with mask_en.
//  DC_CAUCLR empty the SortBuffer.   DC_CVG  generate ConMerge vectors.
//  DC_CFSE   one SIMD instruction.   DC_STORE  stream OMEM / operand memory
//            words to the network-on-chip (word i: OMEM bank i%16, address
//            oaddr+i/16; operand memory address oaddr+i).
// Timing of an MMUL: reads are issued for len cycles, data reaches the
// arrays one cycle later, the result row is written the cycle after the last
// chunk: done = len + 3 cycles after the command (+2 for a merged block's
// CVMEM read). Fills from the network-on-chip are accepted at any time, so a
// buffer can be loaded while the other is being computed on.
module dsc
  import exion_pkg::*;
#(
  parameter int IM_DEPTH  = 64,
  parameter int WM_DEPTH  = 512,
  parameter int OM_DEPTH  = 48,
  parameter int CV_DEPTH  = 297,
  parameter int OPM_DEPTH = 3072,
  parameter int SB_DEPTH  = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  dsc_cmd_t    cmd,
  output logic        busy,
  output logic        done,
  // fills from the network-on-chip
  input  logic        fill_valid,
  input  noc_tgt_e    fill_tgt,
  input  logic [1:0]  fill_buf,
  input  logic [3:0]  fill_bank,
  input  logic [11:0] fill_addr,
  input  gword_t      fill_data,
  // write-back stream to the network-on-chip
  output logic        st_valid,
  output logic [9:0]  st_idx,
  output gword_t      st_data,
  input  logic        st_ready,
  // activity counters
  output logic [15:0] n_dense,
  output logic [15:0] n_merged,
  output logic [15:0] n_conf_line,
  output logic [15:0] n_ep,
  output logic [15:0] n_ep_onehot,
  output logic [9:0]  n_cv_blocks,
  output logic [15:0] n_condensed,
  output logic [15:0] n_merge_ok,
  output logic [15:0] n_merge_fail,
  output logic [15:0] n_moves,
  output logic [15:0] n_spill,
  output logic        sb_overflow,
  output logic [15:0] n_bus_stall
);
  localparam int IAW = $clog2(IM_DEPTH);
  localparam int WAW = $clog2(WM_DEPTH);
  localparam int OAW = $clog2(OM_DEPTH);
  localparam int CAW = $clog2(CV_DEPTH);
  localparam int PAW = $clog2(OPM_DEPTH);

  typedef enum logic [2:0] {D_IDLE, D_CVRD, D_RUN, D_LAST, D_WB, D_WAIT, D_STORE} dstate_e;
  dstate_e  state;
  dsc_cmd_t c;                       // command being executed

  function automatic vec_t to_vec(input gword_t g);
    vec_t v;
    for (int i = 0; i < LANE_LEN; i++) v[i*DW +: DW] = g[i*ELEM_W +: DW];
    return v;
  endfunction

  // ---------------------------------------------------------------- memories
  vec_t   im_rd [NIBUF][LANES];
  vec_t   wm_rd [NWBUF][COLS];
  gword_t om_rd [2][LANES];
  logic   mm_rd_en;
  logic [9:0] kc;
  logic   im_we;
  logic   bus_valid;  noc_tgt_e bus_tgt; logic [1:0] bus_buf; logic [3:0] bus_bank;
  logic [11:0] bus_addr; gword_t bus_data;

  assign im_we = bus_valid && bus_tgt == T_IMEM;

  imem #(.DEPTH(IM_DEPTH)) u_imem (
    .clk, .wr_en(im_we), .wr_buf(bus_buf[0]), .wr_bank(bus_bank), .wr_addr(IAW'(bus_addr)),
    .wr_data(to_vec(bus_data)), .rd_en(mm_rd_en), .rd_addr(IAW'(c.iaddr + kc)), .rd_data(im_rd));

  wmem #(.DEPTH(WM_DEPTH)) u_wmem (
    .clk, .wr_en(fill_valid && fill_tgt == T_WMEM), .wr_buf(fill_buf), .wr_bank(fill_bank),
    .wr_addr(WAW'(fill_addr)), .wr_data(to_vec(fill_data)),
    .rd_en(mm_rd_en), .rd_addr(WAW'(c.waddr + kc)), .rd_data(wm_rd));

  logic   om_we;
  gword_t om_row [LANES];
  logic   om_rd_en;  logic [OAW-1:0] om_rd_addr;
  omem #(.DEPTH(OM_DEPTH)) u_omem (
    .clk, .row_wr_en(om_we), .row_wr_buf(c.obuf), .row_wr_addr(OAW'(c.oaddr)),
    .row_wr_data(om_row), .rd_en(om_rd_en), .rd_addr(om_rd_addr), .rd_data(om_rd));

  // ---------------------------------------------------------------- CVMEM + CAU
  cvm_entry_t cvm_q, cvm_wd;
  logic       cvm_we, cvm_re;
  logic [CAW-1:0] cvm_wa;
  cvmem #(.DEPTH(CV_DEPTH)) u_cvmem (
    .clk, .wr_en(cvm_we), .wr_addr(cvm_wa), .wr_data(cvm_wd),
    .rd_en(cvm_re), .rd_addr(CAW'(cmd.cvaddr)), .rd_data(cvm_q));

  logic cau_push, cau_start, cau_busy, cau_done;
  logic [COL_IDX_W-1:0] cau_idx [COLS];
  logic [MASK_W-1:0]    cau_mask[COLS];
  logic [CAW:0] nblk;
  cau #(.NB(COLS), .CLASS_DEPTH(SB_DEPTH), .AW(CAW)) u_cau (
    .clk, .rst_n, .clear(state == D_IDLE && cmd_valid && cmd.op == DC_CAUCLR),
    .in_valid(cau_push), .in_idx(cau_idx), .in_mask(cau_mask),
    .start(cau_start), .base_addr(CAW'(c.cvaddr)),
    .cvm_we, .cvm_addr(cvm_wa), .cvm_data(cvm_wd), .busy(cau_busy), .done(cau_done),
    .n_blocks(nblk), .n_condensed, .n_merge_ok, .n_merge_fail, .n_moves,
    .n_spill, .overflow(sb_overflow));
  assign n_cv_blocks = 10'(nblk);

  // ---------------------------------------------------------------- SDUE / EPRE
  logic v1, first1;
  logic [LANE_LEN*DW-1:0] rows  [LANES];
  logic [LANE_LEN*DW-1:0] wcols [NWBUF][COLS];
  logic [LANE_LEN*DW-1:0] wsel_cols [COLS];
  logic       cv_valid [LANES];
  logic [3:0] cv_src   [LANES];
  cm_t        cm_in    [LANES][COLS];
  out_t       s_res [LANES][COLS];
  logic [LANES-1:0] s_mask [COLS];
  out_t       e_res [LANES][COLS];
  logic [COLS-1:0]  e_rmask [LANES];
  logic       e_onehot [LANES];
  logic [LANES-1:0] e_cmask [COLS];

  always_comb begin
    for (int r = 0; r < LANES; r++) begin
      rows[r]     = im_rd[c.ibuf][r];
      cv_valid[r] = cvm_q.cv[r].valid;
      cv_src[r]   = cvm_q.cv[r].src;
      for (int k = 0; k < COLS; k++) cm_in[r][k] = cvm_q.cm[r][k];
    end
    for (int k = 0; k < COLS; k++) begin
      for (int b = 0; b < NWBUF; b++) wcols[b][k] = wm_rd[b][k];
      wsel_cols[k] = wm_rd[c.wbuf][k];
    end
  end

  sdue u_sdue (
    .clk, .rst_n, .in_valid(v1 && c.op == DC_MMUL), .in_first(first1),
    .merged(c.merged), .dense_wbuf(c.wbuf), .in_rows(rows), .w_cols(wcols),
    .cv_valid, .cv_src, .cm_in, .scale(c.scale), .shift(c.shift), .thr(c.thr),
    .result(s_res), .bitmask(s_mask));

  epre u_epre (
    .clk, .rst_n, .in_valid(v1 && c.op == DC_EPMM), .in_first(first1),
    .in_rows(rows), .w_cols(wsel_cols), .shift(c.shift), .k(c.topk), .ep_thr(c.ep_thr),
    .score(e_res), .row_mask(e_rmask), .row_onehot(e_onehot), .col_mask(e_cmask));

  always_comb begin
    for (int r = 0; r < LANES; r++)
      for (int k = 0; k < COLS; k++)
        om_row[r][k*ELEM_W +: ELEM_W] = (c.op == DC_EPMM) ? e_res[r][k] : s_res[r][k];
    for (int k = 0; k < COLS; k++) begin
      cau_idx[k]  = c.col_base + COL_IDX_W'(k);
      cau_mask[k] = (c.op == DC_EPMM) ? e_cmask[k] : s_mask[k];
    end
  end
  assign om_we    = (state == D_WB);
  assign cau_push = (state == D_WB) && c.mask_en && !c.merged;

  // ---------------------------------------------------------------- CFSE + bus
  logic cf_start, cf_busy, cf_done;
  logic cf_rda_en, cf_rdb_en, cf_om_en;
  logic [PAW-1:0] cf_rda_addr, cf_rdb_addr;
  logic [5:0] cf_om_addr;
  gword_t opm_a, opm_b;
  logic cf_wv, cf_grant; noc_tgt_e cf_wt; logic [1:0] cf_wb; logic [3:0] cf_wk;
  logic [11:0] cf_wa; gword_t cf_wd;

  cfse #(.OPM_AW(PAW)) u_cfse (
    .clk, .rst_n, .start(cf_start), .op(c.alu_op), .split(c.split), .srca(c.srca), .srcb(c.srcb),
    .dst(c.dst), .ca(c.ca), .cb(c.cb), .cd(c.cd), .len(c.len), .imm(c.cimm),
    .ibuf(c.ibuf), .obuf(c.obuf), .busy(cf_busy), .done(cf_done),
    .opm_rda_en(cf_rda_en), .opm_rda_addr(cf_rda_addr), .opm_rda_data(opm_a),
    .opm_rdb_en(cf_rdb_en), .opm_rdb_addr(cf_rdb_addr), .opm_rdb_data(opm_b),
    .om_rd_en(cf_om_en), .om_rd_addr(cf_om_addr), .om_rd_data(om_rd),
    .wr_valid(cf_wv), .wr_tgt(cf_wt), .wr_buf(cf_wb), .wr_bank(cf_wk), .wr_addr(cf_wa),
    .wr_data(cf_wd), .wr_grant(cf_grant));

  logic noc_bus_v;
  assign noc_bus_v = fill_valid && fill_tgt != T_WMEM;
  shared_bus u_bus (
    .noc_valid(noc_bus_v), .noc_tgt(fill_tgt), .noc_buf(fill_buf), .noc_bank(fill_bank),
    .noc_addr(fill_addr), .noc_data(fill_data),
    .cfse_valid(cf_wv), .cfse_tgt(cf_wt), .cfse_buf(cf_wb), .cfse_bank(cf_wk),
    .cfse_addr(cf_wa), .cfse_data(cf_wd), .cfse_grant(cf_grant),
    .out_valid(bus_valid), .out_tgt(bus_tgt), .out_buf(bus_buf), .out_bank(bus_bank),
    .out_addr(bus_addr), .out_data(bus_data));

  // store engine
  logic [9:0] s_issued, s_idx2;
  logic       s_v2, s_stall, s_issue;
  assign s_stall = s_v2 && !st_ready;
  assign s_issue = (state == D_STORE) && (s_issued != c.len) && !s_stall;

  logic opa_en; logic [PAW-1:0] opa_addr;
  always_comb begin
    if (state == D_STORE) begin
      opa_en   = s_issue && c.st_src;
      opa_addr = PAW'(c.oaddr + 12'(s_issued));
      om_rd_en = s_issue && !c.st_src;
      om_rd_addr = OAW'(c.oaddr + 12'(s_issued >> 4));
    end else begin
      opa_en   = cf_rda_en;
      opa_addr = cf_rda_addr;
      om_rd_en = cf_om_en;
      om_rd_addr = OAW'(cf_om_addr);
    end
  end
  opmem #(.DEPTH(OPM_DEPTH)) u_opmem (
    .clk, .wr_en(bus_valid && bus_tgt == T_OPMEM), .wr_addr(PAW'(bus_addr)), .wr_data(bus_data),
    .rda_en(opa_en), .rda_addr(opa_addr), .rda_data(opm_a),
    .rdb_en(cf_rdb_en), .rdb_addr(cf_rdb_addr), .rdb_data(opm_b));

  assign st_valid = s_v2;
  assign st_idx   = s_idx2;
  assign st_data  = c.st_src ? opm_a : om_rd[c.obuf][s_idx2[3:0]];

  // ---------------------------------------------------------------- sequencer
  assign busy      = (state != D_IDLE);
  assign mm_rd_en  = (state == D_RUN);
  assign cvm_re    = (state == D_IDLE) && cmd_valid && cmd.op == DC_MMUL && cmd.merged;
  assign cau_start = (state == D_IDLE) && cmd_valid && cmd.op == DC_CVG;
  assign cf_start  = (state == D_IDLE) && cmd_valid && cmd.op == DC_CFSE;

  logic conf_used;
  always_comb begin
    conf_used = 1'b0;
    for (int r = 0; r < LANES; r++)
      for (int k = 0; k < COLS; k++) conf_used |= cvm_q.cm[r][k].isel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; c <= '0; done <= 1'b0; kc <= '0; v1 <= 1'b0; first1 <= 1'b0;
      s_issued <= '0; s_idx2 <= '0; s_v2 <= 1'b0;
      n_dense <= '0; n_merged <= '0; n_conf_line <= '0; n_ep <= '0; n_ep_onehot <= '0;
      n_bus_stall <= '0;
    end else begin
      done   <= 1'b0;
      v1     <= mm_rd_en;
      first1 <= mm_rd_en && kc == 0;
      if (cf_wv && !cf_grant) n_bus_stall <= n_bus_stall + 1'b1;
      unique case (state)
        D_IDLE: if (cmd_valid) begin
          c <= cmd;
          kc <= '0;
          unique case (cmd.op)
            DC_MMUL:   state <= cmd.merged ? D_CVRD : ((cmd.len == 0) ? D_WB : D_RUN);
            DC_EPMM:   state <= (cmd.len == 0) ? D_WB : D_RUN;
            DC_CVG, DC_CFSE: state <= D_WAIT;
            DC_STORE:  begin state <= D_STORE; s_issued <= '0; s_v2 <= 1'b0; end
            default:   done <= 1'b1;     // DC_CAUCLR and DC_NONE finish at once
          endcase
        end
        D_CVRD: begin
          if (conf_used) n_conf_line <= n_conf_line + 1'b1;
          state <= (c.len == 0) ? D_WB : D_RUN;
        end
        D_RUN: begin
          kc <= kc + 1'b1;
          if (10'(kc + 1'b1) == c.len) state <= D_LAST;
        end
        D_LAST: state <= D_WB;
        D_WB: begin
          done  <= 1'b1;
          state <= D_IDLE;
          if (c.op == DC_EPMM) begin
            logic [15:0] oh;
            oh = n_ep_onehot;
            for (int r = 0; r < LANES; r++) oh = oh + 16'(e_onehot[r]);
            n_ep_onehot <= oh;
            n_ep <= n_ep + 1'b1;
          end else if (c.merged) n_merged <= n_merged + 1'b1;
          else                   n_dense  <= n_dense + 1'b1;
        end
        D_WAIT: if ((c.op == DC_CVG && cau_done) || (c.op == DC_CFSE && cf_done)) begin
          done <= 1'b1; state <= D_IDLE;
        end
        D_STORE: begin
          if (!s_stall) begin
            s_v2   <= s_issue;
            s_idx2 <= s_issued;
            if (s_issue) s_issued <= s_issued + 1'b1;
            if (s_v2 && 10'(s_idx2 + 1'b1) == c.len) begin
              s_v2 <= 1'b0; done <= 1'b1; state <= D_IDLE;
            end else if (c.len == 0) begin
              done <= 1'b1; state <= D_IDLE;
            end
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{cau_busy, cf_busy, e_rmask[0], bus_buf[1]};
endmodule
