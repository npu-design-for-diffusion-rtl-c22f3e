// tb_dart_topk_mask: runs V_TOPK_MASK on random confidences for (L,k) =
// (32,8), (64,16) and other sizes, with random candidate (still masked)
// positions, including ties and fewer candidates than k. The mask is compared
// with a reference selection (sort by value, earlier position first on ties)
// and the latency must be exactly L cycles, as the paper reports.
module tb_dart_topk_mask;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  localparam int LMAX = 64, KMAX = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [6:0] len = 0;
  logic [4:0] k = 0;
  bf16_t conf [LMAX];
  logic [LMAX-1:0] cand = 0, mask;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  dart_topk_mask #(.LMAX(LMAX), .KMAX(KMAX)) dut (.*);
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    for (int i = 0; i < LMAX; i++) conf[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int L, K, t0; logic [LMAX-1:0] want; bit taken [LMAX];
      L = (t % 3 == 0) ? 32 : (t % 3 == 1) ? 64 : 8 + $urandom_range(50);
      K = (t % 3 == 0) ? 8 : (t % 3 == 1) ? 16 : 1 + $urandom_range(KMAX - 1);
      @(negedge clk);
      for (int i = 0; i < LMAX; i++) begin
        conf[i] = r2bf(real'($urandom_range(200)) / 256.0);   // many ties
        cand[i] = (t % 7 == 6) ? ($urandom_range(9) == 0) : ($urandom_range(3) != 0);
      end
      // reference: repeatedly take the best remaining candidate
      want = 0;
      for (int i = 0; i < LMAX; i++) taken[i] = 0;
      for (int j = 0; j < K; j++) begin
        int best; best = -1;
        for (int i = 0; i < L; i++)
          if (cand[i] && !taken[i] && (best < 0 || bf2r(conf[i]) > bf2r(conf[best]))) best = i;
        if (best >= 0) begin taken[best] = 1; want[best] = 1; end
      end
      len = 7'(L); k = 5'(K); start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      check(cyc - t0 == L, $sformatf("latency %0d for L=%0d", cyc - t0, L));
      check(mask == want, $sformatf("L=%0d k=%0d mask %h want %h", L, K, mask, want));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
