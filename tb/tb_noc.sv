// tb_noc: the network-on-chip with a real GSC and three DSC ports.
// Loads: words go to every DSC of the mask at the same time (broadcast), to
// one bank or spread over the 16 banks; each fill is checked for target,
// buffer, bank, address and data, DSCs outside the mask must see nothing,
// and a load of L words must finish within L + 3 cycles (one word per cycle).
// Stores: the DSCs offer their words with random gaps; the round-robin
// arbiter must place word i of DSC d at gaddr + d*len + i, each exactly once.
module tb_noc;
  import exion_pkg::*;
  localparam int ND = 3;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, ld_start = 0, st_start = 0, busy, done;
  logic [13:0] ld_gaddr, st_gaddr; logic [15:0] ld_len, st_len; logic [ND-1:0] ld_mask, st_mask;
  noc_tgt_e ld_tgt; logic [1:0] ld_buf; logic [3:0] ld_bank; logic [11:0] ld_laddr; logic ld_spread;
  logic g_en, g_we; logic [13:0] g_addr; gword_t g_wdata, g_rdata;
  logic [ND-1:0] fill_valid; noc_tgt_e fill_tgt; logic [1:0] fill_buf; logic [3:0] fill_bank;
  logic [11:0] fill_addr; gword_t fill_data;
  logic dsc_st_valid [ND]; logic [9:0] dsc_st_idx [ND]; gword_t dsc_st_data [ND]; logic dsc_st_ready [ND];
  logic a_en = 0, a_we = 0; logic [13:0] a_addr; gword_t a_wdata, a_rdata;
  noc #(.N_DSC(ND), .GAW(14)) dut (.*);
  gsc #(.DEPTH(16384)) u_gsc (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en(g_en), .b_we(g_we), .b_addr(g_addr), .b_wdata(g_wdata), .b_rdata(g_rdata));
  gword_t ref_g [16384];
  gword_t fills [ND][int];
  int nfill [ND];
  function automatic gword_t rw(); gword_t g; for (int i = 0; i < 8; i++) g[i*32 +: 32] = $urandom; return g; endfunction
  always @(posedge clk) for (int d = 0; d < ND; d++) if (fill_valid[d]) begin
    fills[d][int'(fill_bank) * 4096 + int'(fill_addr)] = fill_data; nfill[d]++;
  end
  // DSC store sources
  int st_next [ND]; int st_accept [ND];
  always @(posedge clk) for (int d = 0; d < ND; d++) if (dsc_st_valid[d] && dsc_st_ready[d]) begin
    st_accept[d]++; st_next[d]++;
  end
  always_comb for (int d = 0; d < ND; d++) begin
    dsc_st_idx[d] = 10'(st_next[d]);
    dsc_st_data[d] = {8{32'(d * 100000 + st_next[d])}};
  end
  always @(negedge clk) for (int d = 0; d < ND; d++) dsc_st_valid[d] = st_mask[d] && st_next[d] < int'(st_len) && $urandom_range(0, 2) != 0;
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic load(int ga, int len, logic [ND-1:0] m, noc_tgt_e t, int b, int bank, int la, bit sp);
    int t0;
    for (int d = 0; d < ND; d++) begin fills[d].delete(); nfill[d] = 0; end
    @(negedge clk);
    ld_gaddr = 14'(ga); ld_len = 16'(len); ld_mask = m; ld_tgt = t; ld_buf = 2'(b); ld_bank = 4'(bank);
    ld_laddr = 12'(la); ld_spread = sp; ld_start = 1; t0 = $time / 10;
    @(negedge clk); ld_start = 0;
    wait (done); @(negedge clk);
    checks++; if ($time / 10 - t0 > len + 3) begin failures++; $display("FAIL load of %0d took %0d cycles", len, $time / 10 - t0); end
    for (int d = 0; d < ND; d++) begin
      checks++;
      if (nfill[d] != (m[d] ? len : 0)) begin failures++; $display("FAIL dsc %0d got %0d fills", d, nfill[d]); end
      if (m[d]) for (int i = 0; i < len; i++) begin
        int key; key = sp ? ((i % 16) * 4096 + la + i / 16) : (bank * 4096 + la + i);
        checks++; if (!fills[d].exists(key) || fills[d][key] != ref_g[ga + i]) begin failures++; $display("FAIL fill d%0d i%0d", d, i); end
      end
    end
  endtask

  initial begin
    st_mask = '0; st_len = 0;
    for (int d = 0; d < ND; d++) begin st_next[d] = 0; st_accept[d] = 0; dsc_st_valid[d] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 14'(i); ref_g[i] = rw(); a_wdata = ref_g[i];
    end
    @(negedge clk); a_en = 0; a_we = 0;
    load(10, 40, 3'b101, T_IMEM, 1, 5, 3, 0);
    load(100, 256, 3'b111, T_WMEM, 2, 0, 16, 1);
    load(400, 17, 3'b010, T_OPMEM, 0, 0, 700, 0);
    // stores from DSC 0 and 2
    @(negedge clk); st_gaddr = 14'd1000; st_len = 16'd30; st_mask = 3'b101; st_start = 1;
    @(negedge clk); st_start = 0;
    wait (done); @(negedge clk);
    for (int d = 0; d < ND; d++) begin checks++; if (st_accept[d] != (st_mask[d] ? 30 : 0)) begin failures++; $display("FAIL dsc %0d stored %0d", d, st_accept[d]); end end
    for (int d = 0; d < ND; d++) if (st_mask[d]) for (int i = 0; i < 30; i++) begin
      @(negedge clk); a_en = 1; a_we = 0; a_addr = 14'(1000 + d*30 + i);
      @(negedge clk); a_en = 0;
      checks++; if (a_rdata != {8{32'(d * 100000 + i)}}) begin failures++; $display("FAIL store d%0d i%0d", d, i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
