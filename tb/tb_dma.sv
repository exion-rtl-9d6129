// tb_dma: DMA and data aligner between the behavioural DRAM (random ready,
// six-cycle read latency) and a real GSC. Loads DRAM -> GSC and stores
// GSC -> DRAM, checking the packing of four 64-bit beats (lowest first)
// into each 256-bit word, and that a load of L words ends within
// 6L + latency + 16 cycles and a store within 8L + 16 cycles with the DRAM
// refusing about a quarter of requests (4 beats per word: 5.3 cycles at
// 75 % acceptance, plus the GSC read and turn-around for a store).
module tb_dma;
  import exion_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, start = 0, dir = 0, busy, done;
  logic [31:0] dram_addr; logic [13:0] gsc_addr; logic [15:0] len;
  logic req_valid, req_ready, req_we, rsp_valid; logic [31:0] req_addr; logic [63:0] req_wdata, rsp_rdata;
  logic g_en, g_we; logic [13:0] g_addr; gword_t g_wdata, g_rdata;
  logic b_en = 0; logic [13:0] b_addr; gword_t b_rdata;
  dma #(.GAW(14)) dut (.*);
  dram_model #(.DEPTH(8192), .LAT(6)) u_dram (.clk, .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata);
  gsc #(.DEPTH(16384)) u_gsc (.clk, .a_en(g_en), .a_we(g_we), .a_addr(g_addr), .a_wdata(g_wdata), .a_rdata(g_rdata),
    .b_en, .b_we(1'b0), .b_addr, .b_wdata('0), .b_rdata);
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic go(bit d, int da, int ga, int l);
    int t0;
    @(negedge clk); dir = d; dram_addr = 32'(da); gsc_addr = 14'(ga); len = 16'(l); start = 1; t0 = $time / 10;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    checks++; if ($time / 10 - t0 > (d ? 8 * l : 6 * l + 6) + 16) begin failures++; $display("FAIL %0d words took %0d cycles", l, $time / 10 - t0); end
    $display("dir %0d: %0d words in %0d cycles", d, l, $time / 10 - t0);
  endtask
  initial begin
    for (int i = 0; i < 8192; i++) u_dram.mem[i] = {$urandom, $urandom};
    repeat (2) @(negedge clk); rst_n = 1;
    go(0, 400, 50, 100);
    for (int w = 0; w < 100; w++) begin
      @(negedge clk); b_en = 1; b_addr = 14'(50 + w); @(negedge clk); b_en = 0;
      checks++;
      if (b_rdata != {u_dram.mem[400 + 4*w + 3], u_dram.mem[400 + 4*w + 2], u_dram.mem[400 + 4*w + 1], u_dram.mem[400 + 4*w]}) begin
        failures++; if (failures < 5) $display("FAIL load word %0d", w);
      end
    end
    go(1, 4000, 50, 100);
    for (int i = 0; i < 400; i++) begin
      checks++; if (u_dram.mem[4000 + i] != u_dram.mem[400 + i]) begin failures++; if (failures < 5) $display("FAIL store beat %0d", i); end
    end
    go(0, 0, 0, 1);
    checks++; if (u_gsc.mem[0] != {u_dram.mem[3], u_dram.mem[2], u_dram.mem[1], u_dram.mem[0]}) begin failures++; $display("FAIL single word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
