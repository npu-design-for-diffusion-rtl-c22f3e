// tb_dart_matrix_unit: streams random MX tiles (two K slices, so accumulation
// across slices is exercised) into a reduced matrix unit (BLEN=4, MLEN=16,
// four sub-arrays), requests M_SUM and compares every BF16 output with a
// reference product computed in real arithmetic. Also checks the drain and
// output timing: first row 2*BLEN-1 cycles after the last input at the
// earliest, then one row per cycle.
module tb_dart_matrix_unit;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  localparam int BLEN = 4, MLEN = 16, NSUB = MLEN / BLEN, KS = 2;
  localparam int K = MLEN * KS;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, sum_req = 0;
  logic signed [7:0] xe [NSUB][BLEN], we [NSUB][BLEN];
  mxscale_t xs [NSUB][BLEN], ws [NSUB][BLEN];
  logic busy, y_valid;
  logic [1:0] y_idx;
  bf16_t y_row [BLEN];
  int checks = 0, failures = 0;
  int A [BLEN][K], W [K][BLEN], SA [BLEN][K], SW [K][BLEN];
  int rows_seen = 0, t_last_in = 0, t_first_out = -1, cyc = 0;

  dart_matrix_unit #(.BLEN(BLEN), .MLEN(MLEN)) dut (
    .clk, .rst_n, .clear, .in_valid, .x_elem(xe), .x_scale(xs), .w_elem(we), .w_scale(ws),
    .sum_req, .busy, .y_valid, .y_idx, .y_row);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (y_valid) begin
    if (t_first_out < 0) t_first_out = cyc;
    check(int'(y_idx) == rows_seen, "row order");
    for (int c = 0; c < BLEN; c++) begin
      real want;
      want = 0.0;
      for (int k = 0; k < K; k++) want += A[y_idx][k] * W[k][c] * (2.0 ** (SA[y_idx][k] + SW[k][c]));
      check(close(bf2r(y_row[c]), want, 0.008, 1e-4),
            $sformatf("y[%0d][%0d] %f want %f", y_idx, c, bf2r(y_row[c]), want));
    end
    rows_seen++;
  end

  initial begin
    for (int s = 0; s < NSUB; s++) for (int i = 0; i < BLEN; i++) begin
      xe[s][i] = 0; we[s][i] = 0; xs[s][i] = 0; ws[s][i] = 0;
    end
    for (int i = 0; i < BLEN; i++) for (int k = 0; k < K; k++) begin
      A[i][k] = int'($urandom_range(255)) - 128; SA[i][k] = int'($urandom_range(4)) - 8;
      W[k][i] = int'($urandom_range(15)) - 8;    SW[k][i] = int'($urandom_range(3)) - 4;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int sl = 0; sl < KS; sl++) begin
      for (int t = 0; t < BLEN; t++) begin
        for (int s = 0; s < NSUB; s++) for (int i = 0; i < BLEN; i++) begin
          int k;
          k = sl * MLEN + s * BLEN + t;
          xe[s][i] = 8'(A[i][k]); xs[s][i] = mxscale_t'(SA[i][k]);
          we[s][i] = 8'(W[k][i]); ws[s][i] = mxscale_t'(SW[k][i]);
        end
        in_valid = 1;
        @(negedge clk);
      end
    end
    in_valid = 0;
    t_last_in = cyc;
    sum_req = 1; @(negedge clk); sum_req = 0;
    wait (!busy);
    @(negedge clk);
    check(rows_seen == BLEN, "all rows");
    check(t_first_out - t_last_in >= 2 * BLEN - 1, $sformatf("drain %0d", t_first_out - t_last_in));
    check(t_first_out - t_last_in <= 2 * BLEN + 2, $sformatf("drain %0d", t_first_out - t_last_in));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
