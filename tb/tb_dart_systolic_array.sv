// tb_dart_systolic_array: a reduced 4x4 array receives two random tiles of
// K=6 (with a clear in between); each accumulator is compared with the exact
// integer reference sum_k A*W*2^(sa+sw+ACC_FRAC) after the 2*BLEN-1 cycle drain.
module tb_dart_systolic_array;
  import dart_pkg::*;
  localparam int BLEN = 4, K = 6, ACC_FRAC = 16;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [7:0] ae [BLEN], be [BLEN];
  mxscale_t as [BLEN], bs [BLEN];
  logic signed [31:0] acc [BLEN][BLEN];
  int checks = 0, failures = 0;
  int A [BLEN][K], W [K][BLEN], SA [BLEN][K], SW [K][BLEN];

  dart_systolic_array #(.BLEN(BLEN), .ACC_FRAC(ACC_FRAC)) dut (
    .clk, .rst_n, .clear, .in_valid, .a_elem(ae), .a_scale(as), .b_elem(be), .b_scale(bs), .acc);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < BLEN; i++) begin ae[i] = 0; be[i] = 0; as[i] = 0; bs[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 2; tile++) begin
      for (int i = 0; i < BLEN; i++) for (int k = 0; k < K; k++) begin
        A[i][k] = int'($urandom_range(255)) - 128; SA[i][k] = int'($urandom_range(6)) - 12;
        W[k][i] = int'($urandom_range(255)) - 128; SW[k][i] = int'($urandom_range(4)) - 6;
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < K; k++) begin
        for (int i = 0; i < BLEN; i++) begin
          ae[i] = 8'(A[i][k]); as[i] = mxscale_t'(SA[i][k]);
          be[i] = 8'(W[k][i]); bs[i] = mxscale_t'(SW[k][i]);
        end
        in_valid = 1;
        @(negedge clk);
      end
      in_valid = 0;
      // one cycle before the drain completes the last PE must still be short
      repeat (2 * BLEN - 2) @(negedge clk);
      begin
        longint want; longint p; int sh;
        want = 0;
        for (int k = 0; k < K; k++) begin
          p = longint'(A[BLEN-1][k]) * W[k][BLEN-1];
          sh = SA[BLEN-1][k] + SW[k][BLEN-1] + ACC_FRAC;
          want += (sh >= 0) ? (p <<< sh) : (p >>> (-sh));
        end
        check(acc[BLEN-1][BLEN-1] == 32'(want), "corner PE final exactly at drain");
      end
      for (int i = 0; i < BLEN; i++) for (int j = 0; j < BLEN; j++) begin
        longint want; longint p; int sh;
        want = 0;
        for (int k = 0; k < K; k++) begin
          p = longint'(A[i][k]) * W[k][j];
          sh = SA[i][k] + SW[k][j] + ACC_FRAC;
          want += (sh >= 0) ? (p <<< sh) : (p >>> (-sh));
        end
        check(acc[i][j] == 32'(want), $sformatf("acc[%0d][%0d]=%0d want %0d", i, j, acc[i][j], want));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
