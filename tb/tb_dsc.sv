// tb_dsc: one DSC driven directly with commands and fills.
//  - fills IMEM #0 (spread: bank i%16) and WMEM #1 with random INT12 data;
//  - a dense MMUL of K chunks must pulse 'done' exactly K + 3 cycles after
//    the command (one chunk per cycle through the 16x16 DPU array) and its
//    OMEM row, streamed out by a store command with random back-pressure,
//    must match a reference product;
//  - a CFSE job writing to IMEM runs while the network-on-chip fills the
//    operand memory, so the shared bus must hold the CFSE back (bus stalls
//    counted) and the CFSE result, read again through an MMUL, must be right.
module tb_dsc;
  import exion_pkg::*;
  localparam int K = 5;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, cmd_valid = 0, busy, done;
  dsc_cmd_t cmd;
  logic fill_valid = 0; noc_tgt_e fill_tgt; logic [1:0] fill_buf; logic [3:0] fill_bank; logic [11:0] fill_addr; gword_t fill_data;
  logic st_valid, st_ready; logic [9:0] st_idx; gword_t st_data;
  logic [15:0] n_dense, n_merged, n_conf_line, n_ep, n_ep_onehot, n_condensed, n_merge_ok, n_merge_fail, n_moves, n_spill, n_bus_stall;
  logic [9:0] n_cv_blocks; logic sb_overflow;
  dsc dut (.*);
  int X [16][K*16], Wt [16][K*16];
  gword_t got [int];
  always @(posedge clk) if (st_valid && st_ready) got[int'(st_idx)] = st_data;
  always @(negedge clk) st_ready = ($urandom_range(0, 2) != 0);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic fill(noc_tgt_e t, int b, int bank, int a, gword_t d);
    @(negedge clk); fill_valid = 1; fill_tgt = t; fill_buf = 2'(b); fill_bank = 4'(bank); fill_addr = 12'(a); fill_data = d;
    @(negedge clk); fill_valid = 0;
  endtask
  task automatic issue(dsc_cmd_t cm, output int cycles);
    int t0;
    @(negedge clk); cmd = cm; cmd_valid = 1; t0 = $time / 10;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    cycles = $time / 10 - t0;
  endtask
  task automatic mmul_check(int tag);
    dsc_cmd_t cm; int cyc;
    cm = '0; cm.op = DC_MMUL; cm.len = K; cm.ibuf = 0; cm.wbuf = 1; cm.obuf = 1; cm.oaddr = 7; cm.scale = 1; cm.shift = 0;
    issue(cm, cyc);
    checks++; if (cyc != K + 3) begin failures++; $display("FAIL MMUL latency %0d, expected %0d", cyc, K + 3); end
    cm = '0; cm.op = DC_STORE; cm.st_src = 0; cm.obuf = 1; cm.oaddr = 7; cm.len = 16;
    got.delete(); issue(cm, cyc);
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      int s; s = 0;
      for (int k = 0; k < K*16; k++) s += X[r][k] * Wt[c][k];
      s = s > 32767 ? 32767 : (s < -32768 ? -32768 : s);
      checks++; if (!got.exists(r) || int'(shortint'(got[r][c*16 +: 16])) != s) begin failures++; if (failures < 8) $display("FAIL %0d r%0d c%0d", tag, r, c); end
    end
  endtask

  initial begin
    gword_t g; int cyc; dsc_cmd_t cm;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 16; r++) for (int k = 0; k < K*16; k++) X[r][k] = $urandom_range(0, 255) - 128;
    for (int c = 0; c < 16; c++) for (int k = 0; k < K*16; k++) Wt[c][k] = $urandom_range(0, 255) - 128;
    for (int k = 0; k < K; k++) for (int r = 0; r < 16; r++) begin
      for (int e = 0; e < 16; e++) g[e*16 +: 16] = 16'(X[r][k*16 + e]);
      fill(T_IMEM, 0, r, k, g);
      for (int e = 0; e < 16; e++) g[e*16 +: 16] = 16'(Wt[r][k*16 + e]);
      fill(T_WMEM, 1, r, k, g);
    end
    mmul_check(0);
    // CFSE: operand memory words 0..K*16-1 = X rows (chunk-major) plus 1, to IMEM #0 while fills go on
    for (int i = 0; i < K*16; i++) begin
      for (int e = 0; e < 16; e++) g[e*16 +: 16] = 16'(X[i % 16][(i / 16)*16 + e] - 1);
      fill(T_OPMEM, 0, 0, i, g);
    end
    for (int i = 0; i < K*16; i++) fill(T_IMEM, 0, i % 16, i / 16, '0);   // clear the old input first
    cm = '0; cm.op = DC_CFSE; cm.alu_op = ALU_ADD; cm.split = 1; cm.srca = CS_OPMEM; cm.srcb = CS_IMM; cm.cimm = 32'h0001_0001;
    cm.dst = CD_IMEM; cm.ca = 0; cm.cd = 0; cm.len = K*16; cm.ibuf = 0;
    @(negedge clk); cmd = cm; cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    for (int i = 0; i < 30; i++) begin           // competing network-on-chip writes
      fill_valid = ($urandom_range(0, 1) == 1); fill_tgt = T_OPMEM; fill_addr = 12'(1000 + i); fill_data = '0; @(negedge clk);
    end
    fill_valid = 0;
    while (!done) @(negedge clk);
    checks++; if (n_bus_stall == 0) begin failures++; $display("FAIL no bus stall"); end
    mmul_check(1);
    checks++; if (n_dense != 2) begin failures++; $display("FAIL n_dense %0d", n_dense); end
    $display("bus stalls %0d", n_bus_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
