// tb_exion_top: end-to-end test of the accelerator at its default size.
//
// A host task loads programs into INSTMEM, preloads the DRAM model with an
// input tile X (16 tokens x 64) and a weight matrix W (64 x 64), starts the
// controller and checks what the programs write back to DRAM.
// Program 1 (FFN-Reuse style first pass):
//   DMA DRAM -> GSC; NoC loads of X into IMEM, W into WMEM #0 (spread over
//   the 16 banks) and a residual operand into the operand memory; CAU clear;
//   four dense SDUE tiles with bitmask generation, stored and checked against
//   a reference; 32 more masked tiles so that SortBuffer classes spill; one
//   EPRE tile; a CFSE residual addition in split 16-bit mode, checked; CVG.
// The testbench watches the CVMEM writes, as a host reading the generated
// ConMerge vectors would, and builds program 2: for the first merged blocks
// it loads the weight column named by every column origin index into the
// matching WMEM buffer and bank, runs merged SDUE tiles and stores them. Each
// merged DPU result is checked against the reference product of the input
// row selected by the conflict vector / control map and the origin column.
// Finally every mechanism counter must be non-zero: dense and merged MMUL,
// conflict-line use, condensing, merge success and failure, conflict moves,
// SortBuffer spill, EPRE tiles and one-hot rows, and the CFSE split mode.
// Broadcast over several DSCs and shared-bus contention cannot happen with
// one DSC and a sequential controller; tb_noc and tb_cfse cover them.
module tb_exion_top;
  import exion_pkg::*;
  localparam int K = 4, NW = 64;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, imem_wr_en = 0, start = 0, done, running;
  logic [8:0] imem_wr_addr; logic [63:0] imem_wr_data;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [31:0] dram_req_addr; logic [63:0] dram_req_wdata, dram_rsp_rdata;
  logic [15:0] n_instr; dsc_stats_t stats [1];
  exion_top dut (.*);
  dram_model #(.DEPTH(16384), .LAT(6)) u_dram (.clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  int X [16][NW], W [NW][NW], R [64][16];
  logic [63:0] prog [$];
  cvm_entry_t cve [$];
  int n_split_cfse;

  always @(posedge clk) if (rst_n && dut.g_dsc[0].u_dsc.cvm_we) cve.push_back(dut.g_dsc[0].u_dsc.cvm_wd);

  function automatic logic [63:0] ins(opcode_e op, int sub, int mask, int bsel, int bank, int imm);
    instr_t i;
    i.op = op; i.sub = 4'(sub); i.mask = 8'(mask); i.bsel = 2'(bsel); i.bank = 4'(bank); i.rsv = '0; i.imm = 32'(imm);
    return i;
  endfunction
  task automatic set(int r, int v); prog.push_back(ins(OP_SET, r, 0, 0, 0, v)); endtask

  // GSC word w <-> DRAM beats 4w..4w+3, element e in bits [16e +: 16]
  task automatic put_word(int w, int el [16]);
    for (int q = 0; q < 4; q++) begin
      logic [63:0] b;
      for (int e = 0; e < 4; e++) b[e*16 +: 16] = 16'(el[q*4 + e]);
      u_dram.mem[w*4 + q] = b;
    end
  endtask
  function automatic int get_elem(int w, int e);
    logic [63:0] b; b = u_dram.mem[w*4 + e/4];
    return int'(shortint'(b[(e%4)*16 +: 16]));
  endfunction
  function automatic int dotp(int row, int col);
    int s; s = 0;
    for (int k = 0; k < NW; k++) s += X[row][k] * W[k][col];
    return s;
  endfunction
  function automatic int sat(int v); return v > 32767 ? 32767 : (v < -32768 ? -32768 : v); endfunction

  task automatic run_prog(int max_cycles);
    int t0;
    @(negedge clk);
    foreach (prog[i]) begin imem_wr_en = 1; imem_wr_addr = 9'(i); imem_wr_data = prog[i]; @(negedge clk); end
    imem_wr_en = 0;
    checks++; if (prog.size() > 384) begin failures++; $display("FAIL program too long"); end
    start = 1; @(negedge clk); start = 0;
    t0 = $time / 10;
    while (!done && ($time / 10 - t0) < max_cycles) @(negedge clk);
    checks++; if (!done) begin failures++; $display("FAIL program did not halt"); end
    $display("program of %0d instructions ran in %0d cycles", prog.size(), $time / 10 - t0);
    prog.delete();
  endtask

  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int el [16]; int ne;
    n_split_cfse = 0;
    for (int r = 0; r < 16; r++) for (int k = 0; k < NW; k++) X[r][k] = $urandom_range(0, 15) - 8;
    for (int k = 0; k < NW; k++) for (int j = 0; j < NW; j++) W[k][j] = $urandom_range(0, 15) - 8;
    for (int i = 0; i < 64; i++) for (int e = 0; e < 16; e++) R[i][e] = $urandom_range(0, 2000) - 1000;
    // X: GSC word k*16+r; W tiled: 256 + t*64 + k*16 + c; W transposed: 1024 + j*K + k; R: 1536 + i
    for (int k = 0; k < K; k++) for (int r = 0; r < 16; r++) begin
      for (int e = 0; e < 16; e++) el[e] = X[r][k*16 + e]; put_word(k*16 + r, el); end
    for (int t = 0; t < 4; t++) for (int k = 0; k < K; k++) for (int c = 0; c < 16; c++) begin
      for (int e = 0; e < 16; e++) el[e] = W[k*16 + e][t*16 + c]; put_word(256 + t*64 + k*16 + c, el); end
    for (int j = 0; j < NW; j++) for (int k = 0; k < K; k++) begin
      for (int e = 0; e < 16; e++) el[e] = W[k*16 + e][j]; put_word(1024 + j*K + k, el); end
    for (int i = 0; i < 64; i++) begin for (int e = 0; e < 16; e++) el[e] = R[i][e]; put_word(1536 + i, el); end

    repeat (3) @(negedge clk); rst_n = 1;

    // ------------------------------------------------------------ program 1
    set(R_DRAM, 0); set(R_GSC, 0); set(R_LEN, 1600);
    prog.push_back(ins(OP_DMA, 0, 0, 0, 0, 0));
    set(R_GSC, 0); set(R_LEN, 64); set(R_IADDR, 0);
    prog.push_back(ins(OP_NOC_LD, 8 | 0, 1, 0, 0, 0));          // X -> IMEM #0, spread
    set(R_GSC, 256); set(R_LEN, 256);
    prog.push_back(ins(OP_NOC_LD, 8 | 1, 1, 0, 0, 0));          // W -> WMEM #0, spread
    set(R_GSC, 1536); set(R_LEN, 64);
    prog.push_back(ins(OP_NOC_LD, 2, 1, 0, 0, 0));              // R -> operand memory 0..63
    prog.push_back(ins(OP_CAUCLR, 0, 1, 0, 0, 0));
    set(R_SCALE, 1); set(R_LEN, K); set(R_IADDR, 0);
    for (int t = 0; t < 4; t++) begin
      set(R_WADDR, t*K); set(R_OADDR, t); set(R_COLB, t*16); set(R_THR, t == 3 ? 420 : 180);
      prog.push_back(ins(OP_MMUL, 2, 1, 0, 0, 0));              // dense, bitmask to CAU, OMEM #0
    end
    for (int i = 0; i < 32; i++) begin
      set(R_WADDR, (i % 4)*K); set(R_OADDR, 4 + i % 8); set(R_COLB, 64 + 16*i); set(R_THR, 150 + 10*(i % 9));
      prog.push_back(ins(OP_MMUL, 2, 1, 0, 8, 0));              // OMEM #1
    end
    set(R_TOPK, (40 << 16) | 4); set(R_SCALE, 0); set(R_WADDR, 0); set(R_OADDR, 0);
    prog.push_back(ins(OP_EPMM, 0, 1, 0, 8, 0));
    // residual: OMEM #0 words 0..63 + operand memory 0..63 -> operand memory 256.., split 16-bit
    set(R_CFSE, (0 << 8) | (0 << 6) | (1 << 4) | (1 << 3) | 0); set(R_CA, 0); set(R_CB, 0); set(R_CD, 256); set(R_LEN, 64);
    prog.push_back(ins(OP_CFSE, 0, 1, 0, 0, 0)); n_split_cfse++;
    // stores: dense results (OMEM #0) -> GSC 2048, residual sums -> GSC 2112
    set(R_IADDR, 0); set(R_GSC, 2048); set(R_LEN, 64);
    prog.push_back(ins(OP_NOC_ST, 0, 1, 0, 0, 0));
    set(R_IADDR, 256); set(R_GSC, 2112);
    prog.push_back(ins(OP_NOC_ST, 1, 1, 0, 0, 0));
    set(R_DRAM, 4*2048); set(R_GSC, 2048); set(R_LEN, 128);
    prog.push_back(ins(OP_DMA, 1, 0, 0, 0, 0));
    set(R_CV, 0);
    prog.push_back(ins(OP_CVG, 0, 1, 0, 0, 0));
    prog.push_back(ins(OP_HALT, 0, 0, 0, 0, 0));
    run_prog(100000);

    for (int t = 0; t < 4; t++) for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      int exp_v; exp_v = sat(dotp(r, t*16 + c));
      checks++; if (get_elem(2048 + t*16 + r, c) != exp_v) begin failures++; if (failures < 10) $display("FAIL dense t%0d r%0d c%0d got %0d exp %0d", t, r, c, get_elem(2048 + t*16 + r, c), exp_v); end
      exp_v = int'(shortint'(16'(exp_v + R[t*16 + r][c])));
      checks++; if (get_elem(2112 + t*16 + r, c) != exp_v) begin failures++; if (failures < 10) $display("FAIL residual t%0d r%0d c%0d", t, r, c); end
    end
    $display("CVG wrote %0d merged blocks for 36 masked tiles", cve.size());
    checks++; if (cve.size() == 0 || int'(stats[0].n_cv_blocks) != cve.size()) begin failures++; $display("FAIL CVG entries"); end

    // ------------------------------------------------------------ program 2
    ne = cve.size() < 3 ? cve.size() : 3;
    for (int e = 0; e < ne; e++) begin
      set(R_IADDR, 128); set(R_LEN, K);
      for (int s = 0; s < 3; s++) for (int c = 0; c < 16; c++)
        if (cve[e].origin[s][c].valid) begin
          set(R_GSC, 1024 + (int'(cve[e].origin[s][c].idx) % 64) * K);
          prog.push_back(ins(OP_NOC_LD, 1, 1, s, c, 0));        // WMEM #s bank c
        end
      set(R_IADDR, 0); set(R_WADDR, 128); set(R_CV, e); set(R_OADDR, 8 + e); set(R_SCALE, 1);
      prog.push_back(ins(OP_MMUL, 1, 1, 0, 0, 0));              // merged
    end
    set(R_IADDR, 8); set(R_GSC, 2304); set(R_LEN, 16*ne);
    prog.push_back(ins(OP_NOC_ST, 0, 1, 0, 0, 0));
    set(R_DRAM, 4*2304); set(R_GSC, 2304); set(R_LEN, 16*ne);
    prog.push_back(ins(OP_DMA, 1, 0, 0, 0, 0));
    prog.push_back(ins(OP_HALT, 0, 0, 0, 0, 0));
    run_prog(100000);

    for (int e = 0; e < ne; e++) for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      cm_t m; int exp_v, row, j;
      m = cve[e].cm[r][c]; exp_v = 0;
      if (m.wsel != 0) begin
        j = int'(cve[e].origin[m.wsel - 1][c].idx) % 64;
        row = m.isel ? int'(cve[e].cv[r].src) : r;
        exp_v = sat(dotp(row, j));
      end
      checks++; if (get_elem(2304 + e*16 + r, c) != exp_v) begin failures++; if (failures < 10) $display("FAIL merged e%0d r%0d c%0d got %0d exp %0d", e, r, c, get_elem(2304 + e*16 + r, c), exp_v); end
    end

    // ------------------------------------------------------------ mechanisms
    $display("dense %0d merged %0d conflict-line %0d ep %0d ep-onehot %0d blocks %0d condensed %0d merge ok %0d fail %0d moves %0d spill %0d overflow %0d split-cfse %0d",
      stats[0].n_dense, stats[0].n_merged, stats[0].n_conf_line, stats[0].n_ep, stats[0].n_ep_onehot, stats[0].n_cv_blocks,
      stats[0].n_condensed, stats[0].n_merge_ok, stats[0].n_merge_fail, stats[0].n_moves, stats[0].n_spill, stats[0].sb_overflow, n_split_cfse);
    checks++; if (stats[0].n_dense == 0)      begin failures++; $display("FAIL no dense MMUL"); end
    checks++; if (stats[0].n_merged == 0)     begin failures++; $display("FAIL no merged MMUL"); end
    checks++; if (stats[0].n_conf_line == 0)  begin failures++; $display("FAIL no conflict line used"); end
    checks++; if (stats[0].n_ep == 0)         begin failures++; $display("FAIL no EPRE tile"); end
    checks++; if (stats[0].n_ep_onehot == 0)  begin failures++; $display("FAIL no one-hot row"); end
    checks++; if (stats[0].n_condensed == 0)  begin failures++; $display("FAIL nothing condensed"); end
    checks++; if (stats[0].n_merge_ok == 0)   begin failures++; $display("FAIL no merge"); end
    checks++; if (stats[0].n_merge_fail == 0) begin failures++; $display("FAIL no failed merge"); end
    checks++; if (stats[0].n_moves == 0)      begin failures++; $display("FAIL no conflict move"); end
    checks++; if (stats[0].n_spill == 0)      begin failures++; $display("FAIL no SortBuffer spill"); end
    checks++; if (stats[0].sb_overflow)       begin failures++; $display("FAIL SortBuffer overflow"); end
    checks++; if (n_split_cfse == 0)          begin failures++; $display("FAIL no split-mode CFSE"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
