// tb_ep_topk: random score rows (with forced ties) against a reference
// ranking; checks the top-k mask and the one-hot decision.
module tb_ep_topk;
  import exion_pkg::*;
  int checks = 0, failures = 0;
  out_t score [16]; logic [4:0] k; logic [15:0] thr; logic [15:0] mask; logic onehot;
  ep_topk dut (.*);
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int n_onehot = 0;
    for (int t = 0; t < 400; t++) begin
      int rank [16]; int first, second; bit oh; logic [15:0] em;
      for (int i = 0; i < 16; i++) score[i] = out_t'($urandom_range(0, 2000)) - 16'sd1000;
      if (t % 3 == 0) score[$urandom_range(0, 15)] = 16'sd20000;   // a dominant element
      if (t % 5 == 0) score[1] = score[2];                          // a tie
      k = 5'($urandom_range(0, 16)); thr = 16'($urandom_range(0, 20000));
      #1;
      for (int i = 0; i < 16; i++) begin
        rank[i] = 0;
        for (int j = 0; j < 16; j++) if (j != i && (score[j] > score[i] || (score[j] == score[i] && j < i))) rank[i]++;
      end
      for (int i = 0; i < 16; i++) begin if (rank[i] == 0) first = score[i]; if (rank[i] == 1) second = score[i]; end
      oh = (first - second) > int'(thr);
      for (int i = 0; i < 16; i++) em[i] = oh ? (rank[i] == 0) : (rank[i] < int'(k));
      checks++; if (onehot != oh || mask != em) begin failures++; $display("FAIL t=%0d mask %h exp %h oh %0d exp %0d", t, mask, em, onehot, oh); end
      n_onehot += int'(oh);
    end
    checks++; if (n_onehot == 0) begin failures++; $display("FAIL no one-hot row"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
