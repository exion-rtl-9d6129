// tb_top_ctrl: the controller with a real INSTMEM and stand-in units that
// answer 'done' after random delays. A program of SET, DMA, NOC_LD, NOC_ST,
// MMUL, CFSE and HALT is run; the testbench checks the order of the started
// operations, the decoded fields (addresses, lengths, masks, buffer and bank
// selects, command registers), that nothing new starts before the previous
// operation is done (a NOC_ST waits for both the NoC and the DSCs), the
// two-cycle fetch + decode of a SET, and that 'halted' rises at HALT.
module tb_top_ctrl;
  import exion_pkg::*;
  localparam int ND = 2;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, start = 0, halted, running;
  logic if_en; logic [8:0] if_addr; instr_t if_data;
  logic dma_start, dma_dir, dma_done; logic [31:0] dma_dram; logic [13:0] dma_gsc; logic [15:0] dma_len;
  logic ld_start, st_start, noc_done, ld_spread; logic [13:0] noc_gaddr; logic [15:0] noc_len; logic [ND-1:0] noc_mask;
  noc_tgt_e ld_tgt; logic [1:0] ld_buf; logic [3:0] ld_bank; logic [11:0] ld_laddr;
  logic [ND-1:0] dsc_valid, dsc_done; dsc_cmd_t dsc_cmd; logic [15:0] n_instr;
  logic wr_en = 0; logic [8:0] wr_addr; logic [63:0] wr_data;
  top_ctrl #(.N_DSC(ND), .IAW(9), .GAW(14)) dut (.*);
  instmem #(.DEPTH(384)) u_im (.clk, .wr_en, .wr_addr, .wr_data, .rd_en(if_en), .rd_addr(if_addr), .rd_data(if_data));

  string ev [$];
  int unit_busy, dsc_busy [ND];
  // stand-in units
  int dma_cnt, noc_cnt, dcnt [ND];
  always @(posedge clk) begin
    dma_done <= 0; noc_done <= 0;
    for (int d = 0; d < ND; d++) dsc_done[d] <= 0;
    if (dma_start || ld_start || st_start) begin
      checks++; if (unit_busy != 0 || dsc_busy[0] != 0 || dsc_busy[1] != 0) begin failures++; $display("FAIL started while busy"); end
    end
    if (dma_start) begin ev.push_back($sformatf("DMA %0d %0d %0d %0d", dma_dir, dma_dram, dma_gsc, dma_len)); unit_busy = 1; dma_cnt = $urandom_range(1, 6); end
    if (ld_start) begin ev.push_back($sformatf("LD %0d %0d %b %0d %0d %0d %0d %0d", noc_gaddr, noc_len, noc_mask, ld_tgt, ld_buf, ld_bank, ld_laddr, ld_spread)); unit_busy = 2; noc_cnt = $urandom_range(1, 6); end
    if (st_start) begin ev.push_back($sformatf("ST %0d %0d %b", noc_gaddr, noc_len, noc_mask)); unit_busy = 2; noc_cnt = $urandom_range(1, 9); end
    for (int d = 0; d < ND; d++) if (dsc_valid[d]) begin
      checks++; if (dsc_busy[d] != 0) begin failures++; $display("FAIL DSC restarted"); end
      ev.push_back($sformatf("DSC%0d %0d m%0d e%0d ib%0d wb%0d ob%0d len%0d ia%0d wa%0d oa%0d cv%0d sc%0d sh%0d thr%0d cb%0d op%0d sp%0d", d, dsc_cmd.op, dsc_cmd.merged,
        dsc_cmd.mask_en, dsc_cmd.ibuf, dsc_cmd.wbuf, dsc_cmd.obuf, dsc_cmd.len, dsc_cmd.iaddr, dsc_cmd.waddr, dsc_cmd.oaddr, dsc_cmd.cvaddr,
        dsc_cmd.scale, dsc_cmd.shift, dsc_cmd.thr, dsc_cmd.col_base, dsc_cmd.alu_op, dsc_cmd.split));
      dsc_busy[d] = 1; dcnt[d] = (dsc_cmd.op == DC_STORE) ? 12 : $urandom_range(1, 8);   // a store outlasts the NoC
    end
    if (unit_busy == 1) begin dma_cnt--; if (dma_cnt == 0) begin dma_done <= 1; unit_busy = 0; end end
    if (unit_busy == 2) begin noc_cnt--; if (noc_cnt == 0) begin noc_done <= 1; unit_busy = 0; end end
    for (int d = 0; d < ND; d++) if (dsc_busy[d] != 0) begin dcnt[d]--; if (dcnt[d] == 0) begin dsc_done[d] <= 1; dsc_busy[d] = 0; end end
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [63:0] ins(opcode_e op, int sub, int mask, int bsel, int bank, int imm);
    instr_t i; i.op = op; i.sub = 4'(sub); i.mask = 8'(mask); i.bsel = 2'(bsel); i.bank = 4'(bank); i.rsv = '0; i.imm = 32'(imm); return i;
  endfunction
  initial begin
    logic [63:0] p [$]; string exp_ev [$];
    int t0;
    unit_busy = 0; dsc_busy = '{0, 0};
    p.push_back(ins(OP_SET, R_DRAM, 0, 0, 0, 1234)); p.push_back(ins(OP_SET, R_GSC, 0, 0, 0, 77)); p.push_back(ins(OP_SET, R_LEN, 0, 0, 0, 9));
    p.push_back(ins(OP_DMA, 0, 0, 0, 0, 0));
    p.push_back(ins(OP_SET, R_IADDR, 0, 0, 0, 33));
    p.push_back(ins(OP_NOC_LD, 8 | 1, 3, 2, 5, 0));
    p.push_back(ins(OP_SET, R_WADDR, 0, 0, 0, 44)); p.push_back(ins(OP_SET, R_OADDR, 0, 0, 0, 5)); p.push_back(ins(OP_SET, R_CV, 0, 0, 0, 17));
    p.push_back(ins(OP_SET, R_SCALE, 0, 0, 0, (3 << 16) | 100)); p.push_back(ins(OP_SET, R_THR, 0, 0, 0, 250)); p.push_back(ins(OP_SET, R_COLB, 0, 0, 0, 320));
    p.push_back(ins(OP_MMUL, 3, 2, 1, 8 | 2, 0));
    p.push_back(ins(OP_SET, R_CFSE, 0, 0, 0, (1 << 8) | (2 << 6) | (1 << 4) | (1 << 3) | 2));
    p.push_back(ins(OP_CFSE, 0, 3, 0, 0, 0));
    p.push_back(ins(OP_NOC_ST, 0, 3, 0, 0, 0));
    p.push_back(ins(OP_DMA, 1, 0, 0, 0, 0));
    p.push_back(ins(OP_HALT, 0, 0, 0, 0, 0));
    exp_ev = '{"DMA 0 1234 77 9", "LD 77 9 11 1 2 5 33 1",
      "DSC1 1 m1 e1 ib1 wb2 ob1 len9 ia33 wa44 oa5 cv17 sc100 sh3 thr250 cb320 op0 sp0",
      "DSC0 5 m0 e0 ib0 wb0 ob0 len9 ia33 wa44 oa5 cv17 sc100 sh3 thr250 cb320 op2 sp1",
      "DSC1 5 m0 e0 ib0 wb0 ob0 len9 ia33 wa44 oa5 cv17 sc100 sh3 thr250 cb320 op2 sp1",
      "ST 77 9 11",
      "DSC0 6 m0 e0 ib0 wb0 ob0 len9 ia33 wa44 oa33 cv17 sc100 sh3 thr250 cb320 op2 sp1",
      "DSC1 6 m0 e0 ib0 wb0 ob0 len9 ia33 wa44 oa33 cv17 sc100 sh3 thr250 cb320 op2 sp1",
      "DMA 1 1234 77 9"};
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (p[i]) begin wr_en = 1; wr_addr = 9'(i); wr_data = p[i]; @(negedge clk); end
    wr_en = 0;
    start = 1; t0 = $time / 10; @(negedge clk); start = 0;
    // three SETs take 2 cycles each before the DMA starts
    while (!dma_start) @(negedge clk);
    checks++; if ($time / 10 - t0 != 1 + 3 * 2 + 1) begin failures++; $display("FAIL DMA started after %0d cycles", $time / 10 - t0); end
    while (!halted) @(negedge clk);
    checks++; if (ev.size() != exp_ev.size()) begin failures++; $display("FAIL %0d events", ev.size()); end
    foreach (exp_ev[i]) begin
      checks++; if (i >= ev.size() || ev[i] != exp_ev[i]) begin failures++; $display("FAIL event %0d: '%s' expected '%s'", i, i < ev.size() ? ev[i] : "", exp_ev[i]); end
    end
    checks++; if (n_instr != 16'(p.size())) begin failures++; $display("FAIL n_instr %0d", n_instr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
