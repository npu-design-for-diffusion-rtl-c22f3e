// tb_dart_mx_quantizer: random BF16 blocks with a different magnitude range
// per block are quantized; each element must equal round(x / 2^scale) within
// the element range, the scale must follow the block's largest exponent, and
// dequantizing (in real arithmetic) must be within half a step of the input.
module tb_dart_mx_quantizer;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  localparam int N = 64, BLK = 32, NB = N / BLK;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  bf16_t in_data [N];
  logic signed [7:0] out_elem [N];
  mxscale_t out_scale [NB];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  dart_mx_quantizer #(.N(N), .BLK(BLK), .ELEM_W(8)) dut (.*);
  initial begin
    for (int i = 0; i < N; i++) in_data[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        real r; int e;
        e = $urandom_range(20);
        e = e - 10 + (i / BLK) * 3;
        r = (real'($urandom_range(2000)) - 1000.0) / 1000.0 * (2.0 ** e);
        in_data[i] = r2bf(r);
      end
      in_valid = 1; @(negedge clk); in_valid = 0;
      check(out_valid, "valid after one cycle");
      for (int b = 0; b < NB; b++) begin
        real amax, st;
        amax = 0;
        for (int i = 0; i < BLK; i++) begin
          real v;
          v = bf2r(in_data[b*BLK+i]);
          if (v < 0) v = -v;
          if (v > amax) amax = v;
        end
        st = 2.0 ** out_scale[b];
        check(amax / st < 128.0 && amax / st >= 32.0, $sformatf("scale %0d amax %f", out_scale[b], amax));
        for (int i = 0; i < BLK; i++) begin
          real x, q;
          x = bf2r(in_data[b*BLK+i]);
          q = x / st;
          q = (q >= 0) ? $floor(q + 0.5) : -$floor(-q + 0.5);
          if (q > 127) q = 127;
          if (q < -127) q = -127;
          check(int'(out_elem[b*BLK+i]) == int'(q), $sformatf("elem %0d want %0d", out_elem[b*BLK+i], int'(q)));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
