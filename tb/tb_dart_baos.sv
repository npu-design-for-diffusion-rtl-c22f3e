// tb_dart_baos: D=16 channels, 2 slots. Calibrates on 24 random token vectors
// with channel-dependent offsets and outlier magnitudes, in mean mode with
// alpha=1.0 and minmax mode with alpha=0.6; the centre and factor of every
// channel are compared with the paper's formulas evaluated in real
// arithmetic, then normalised keys (x-c)/f and scaled queries Q*f are checked,
// and Q_s.K_s (with the centre term) must reproduce Q.K.
module tb_dart_baos;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  localparam int D = 16, S = 24;
  logic clk = 0, rst_n = 0, calib_clear = 0, calib_valid = 0, finalize = 0, mode_minmax = 0, in_valid = 0, op_qscale = 0, out_valid;
  logic [0:0] slot = 0;
  logic [8:0] alpha = 256;
  bf16_t in_vec [D], out_vec [D], center [D], factor [D];
  real X [S][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  dart_baos #(.D(D), .SLOTS(2)) dut (.*);
  initial begin
    for (int d = 0; d < D; d++) in_vec[d] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      real cr [D], fr [D];
      slot = 1'(pass);
      mode_minmax = (pass == 1); alpha = (pass == 1) ? 9'd154 : 9'd256;   // 154/256 ~ 0.6
      @(negedge clk); calib_clear = 1; @(negedge clk); calib_clear = 0;
      for (int s = 0; s < S; s++) begin
        for (int d = 0; d < D; d++) begin
          real r; int e;
          e = (d % 5 == 0) ? 4 : 0;          // outlier channels
          r = (real'($urandom_range(2000)) - 1000.0) / 500.0 * (2.0 ** e) + d * 0.25;
          in_vec[d] = r2bf(r); X[s][d] = bf2r(in_vec[d]);
        end
        calib_valid = 1; @(negedge clk);
      end
      calib_valid = 0;
      finalize = 1; @(negedge clk); finalize = 0;
      for (int d = 0; d < D; d++) begin
        real mn, mx, sm, c, f;
        mn = 1e30; mx = -1e30; sm = 0;
        for (int s = 0; s < S; s++) begin
          if (X[s][d] < mn) mn = X[s][d];
          if (X[s][d] > mx) mx = X[s][d];
          sm += X[s][d];
        end
        c = (pass == 1) ? (mn + mx) / 2.0 : sm / S;
        f = (mx - c > c - mn) ? mx - c : c - mn;
        f = f ** (real'(alpha) / 256.0);
        cr[d] = c; fr[d] = f;
        check(close(bf2r(center[d]), c, 0.03, 0.05), $sformatf("pass %0d c[%0d] %f want %f", pass, d, bf2r(center[d]), c));
        check(close(bf2r(factor[d]), f, 0.03, 0.02), $sformatf("pass %0d f[%0d] %f want %f", pass, d, bf2r(factor[d]), f));
      end
      for (int s = 0; s < 4; s++) begin
        real qk, qsks, csum; real kr [D], qr [D];
        for (int d = 0; d < D; d++) begin kr[d] = X[s][d]; in_vec[d] = r2bf(kr[d]); end
        op_qscale = 0; in_valid = 1; @(negedge clk); in_valid = 0;
        check(out_valid, "norm valid");
        qk = 0; qsks = 0; csum = 0;
        for (int d = 0; d < D; d++) begin
          check(close(bf2r(out_vec[d]), (kr[d] - bf2r(center[d])) / bf2r(factor[d]), 0.03, 0.02), "(x-c)/f");
        end
        for (int d = 0; d < D; d++) qsks += 0;  // keep structure simple
        for (int d = 0; d < D; d++) begin qr[d] = (real'($urandom_range(200)) - 100.0) / 50.0; end
        for (int d = 0; d < D; d++) in_vec[d] = r2bf(qr[d]);
        begin
          real ks [D];
          for (int d = 0; d < D; d++) ks[d] = (kr[d] - bf2r(center[d])) / bf2r(factor[d]);
          op_qscale = 1; in_valid = 1; @(negedge clk); in_valid = 0;
          for (int d = 0; d < D; d++) begin
            check(close(bf2r(out_vec[d]), bf2r(in_vec[d]) * bf2r(factor[d]), 0.012, 1e-3), "Q*f");
            qk += bf2r(in_vec[d]) * kr[d];
            qsks += bf2r(out_vec[d]) * ks[d];
            csum += bf2r(in_vec[d]) * bf2r(center[d]);
          end
          check(close(qsks + csum, qk, 0.02, 0.1), $sformatf("Qs.Ks + Q.c %f vs Q.K %f", qsks + csum, qk));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
