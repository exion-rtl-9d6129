// tb_cfse: the SIMD engine with a real operand memory and OMEM. Runs
// element-wise operations in 32-bit and split 16-bit mode, with operand A
// from the operand memory or OMEM and operand B from the operand memory or
// the scalar, and checks every word written against a model. With the bus
// always granted done rises L + 1 cycles after start is driven for a job of L words
// (one word per cycle); with random bus refusals it checks that nothing is
// lost or duplicated while stalled.
module tb_cfse;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, start = 0, split = 0, ibuf = 0, obuf = 0;
  alu_op_e op; cfse_src_e srca, srcb; cfse_dst_e dst;
  logic [11:0] ca, cb, cd; logic [9:0] len; logic [31:0] imm;
  logic busy, done;
  logic opm_rda_en, opm_rdb_en; logic [11:0] opm_rda_addr, opm_rdb_addr; gword_t opm_rda_data, opm_rdb_data;
  logic om_rd_en; logic [5:0] om_rd_addr; gword_t om_rd_data [2][16];
  logic wr_valid, wr_grant; noc_tgt_e wr_tgt; logic [1:0] wr_buf; logic [3:0] wr_bank; logic [11:0] wr_addr; gword_t wr_data;
  logic tb_opm_we = 0; logic [11:0] tb_opm_addr; gword_t tb_opm_data;
  logic om_we = 0; logic om_buf = 0; logic [5:0] om_addr; gword_t om_row [16];
  cfse dut (.*);
  opmem #(.DEPTH(3072)) u_opm (.clk,
    .wr_en(tb_opm_we || (wr_valid && wr_grant && wr_tgt == T_OPMEM)),
    .wr_addr(tb_opm_we ? tb_opm_addr : wr_addr), .wr_data(tb_opm_we ? tb_opm_data : wr_data),
    .rda_en(opm_rda_en), .rda_addr(opm_rda_addr), .rda_data(opm_rda_data),
    .rdb_en(opm_rdb_en), .rdb_addr(opm_rdb_addr), .rdb_data(opm_rdb_data));
  omem #(.DEPTH(48)) u_om (.clk, .row_wr_en(om_we), .row_wr_buf(om_buf), .row_wr_addr(om_addr),
    .row_wr_data(om_row), .rd_en(om_rd_en), .rd_addr(om_rd_addr), .rd_data(om_rd_data));

  gword_t opm [3072]; gword_t om [2][48][16];
  gword_t got [int]; int nwr; bit rand_grant = 0;
  function automatic gword_t rw(); gword_t g; for (int i = 0; i < 8; i++) g[i*32 +: 32] = $urandom; return g; endfunction
  function automatic logic [31:0] f32(alu_op_e o, int x, int z);
    case (o)
      ALU_ADD: return x + z;  ALU_SUB: return x - z;  ALU_MUL: return x * z;
      ALU_MAX: return x > z ? x : z;  ALU_MIN: return x < z ? x : z;
      ALU_RELU: return x < 0 ? 0 : x;  ALU_CMPGT: return x > z ? 1 : 0;
      default: return x;
    endcase
  endfunction
  function automatic gword_t model(alu_op_e o, bit sp, gword_t a, gword_t b);
    gword_t y;
    for (int i = 0; i < 8; i++)
      if (!sp) y[i*32 +: 32] = f32(o, a[i*32 +: 32], b[i*32 +: 32]);
      else for (int h = 0; h < 2; h++) begin
        logic [31:0] t; t = f32(o, int'(shortint'(a[i*32 + h*16 +: 16])), int'(shortint'(b[i*32 + h*16 +: 16])));
        y[i*32 + h*16 +: 16] = t[15:0];
      end
    return y;
  endfunction
  always_comb wr_grant = rand_grant ? 1'($urandom_range(0, 2) != 0) : 1'b1;
  int n_stall;
  always @(posedge clk) if (wr_valid) begin
    if (!wr_grant) n_stall++;
    else begin
      int key; key = (wr_tgt == T_IMEM) ? (int'(wr_bank) * 4096 + int'(wr_addr)) : int'(wr_addr) + 100000;
      checks++; if (got.exists(key)) begin failures++; $display("FAIL duplicate write %0d", key); end
      got[key] = wr_data; nwr++;
    end
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(alu_op_e o, bit sp, cfse_src_e sa, cfse_src_e sb, cfse_dst_e d, int l, bit rg);
    int t0, t1;
    op = o; split = sp; srca = sa; srcb = sb; dst = d; len = 10'(l); rand_grant = rg;
    ca = (sa == CS_OMEM) ? 12'd2 : 12'd100; cb = 12'd700; cd = 12'd1500; imm = $urandom; obuf = 1; ibuf = 0;
    got.delete(); nwr = 0;
    @(negedge clk); start = 1; t0 = $time / 10; @(negedge clk); start = 0;
    wait (done); t1 = $time / 10; @(negedge clk);
    if (!rg) begin checks++; if (t1 - t0 != l + 1) begin failures++; $display("FAIL cycles %0d for %0d words", t1 - t0, l); end end
    checks++; if (nwr != l) begin failures++; $display("FAIL %0d writes for %0d words", nwr, l); end
    for (int i = 0; i < l; i++) begin
      gword_t a, b, e; int key;
      a = (sa == CS_OMEM) ? om[1][2 + i / 16][i % 16] : opm[100 + i];
      b = (sb == CS_IMM) ? {8{sp ? {imm[15:0], imm[15:0]} : imm}} : opm[700 + i];
      e = model(o, sp, a, b);
      key = (d == CD_IMEM) ? ((i % 16) * 4096 + 1500 + i / 16) : 1500 + i + 100000;
      checks++;
      if (!got.exists(key) || got[key] != e) begin failures++; if (failures < 10) $display("FAIL op %0d word %0d", o, i); end
      if (d == CD_OPMEM) opm[1500 + i] = e;
    end
  endtask

  initial begin
    n_stall = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk); tb_opm_we = 1; tb_opm_addr = 12'(i); opm[i] = rw(); tb_opm_data = opm[i];
    end
    @(negedge clk); tb_opm_we = 0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < 48; a++) begin
      @(negedge clk); om_we = 1; om_buf = 1'(b); om_addr = 6'(a);
      for (int k = 0; k < 16; k++) begin om[b][a][k] = rw(); om_row[k] = om[b][a][k]; end
    end
    @(negedge clk); om_we = 0;
    run(ALU_ADD, 0, CS_OPMEM, CS_OPMEM, CD_OPMEM, 40, 0);
    run(ALU_MUL, 1, CS_OMEM, CS_IMM, CD_IMEM, 48, 0);
    run(ALU_MAX, 1, CS_OPMEM, CS_OPMEM, CD_IMEM, 37, 1);
    run(ALU_RELU, 0, CS_OMEM, CS_IMM, CD_OPMEM, 20, 1);
    run(ALU_SUB, 1, CS_OMEM, CS_OPMEM, CD_IMEM, 64, 1);
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall happened"); end
    $display("bus stalls: %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
