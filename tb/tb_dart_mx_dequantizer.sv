// tb_dart_mx_dequantizer: random MX elements and scales; every output must be
// the BF16 nearest to elem * 2^scale (computed in real arithmetic).
module tb_dart_mx_dequantizer;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  localparam int N = 64, BLK = 32, NB = N / BLK;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] in_elem [N];
  mxscale_t in_scale [NB];
  bf16_t out_data [N];
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
  dart_mx_dequantizer #(.N(N), .BLK(BLK), .ELEM_W(8)) dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) in_elem[i] = 8'($urandom);
      for (int b = 0; b < NB; b++) in_scale[b] = mxscale_t'(int'($urandom_range(40)) - 20);
      in_valid = 1; @(negedge clk); in_valid = 0;
      check(out_valid, "valid");
      for (int i = 0; i < N; i++)
        check(out_data[i] == r2bf(real'(in_elem[i]) * (2.0 ** in_scale[i / BLK])),
              $sformatf("deq %0d*2^%0d got %h", in_elem[i], in_scale[i/BLK], out_data[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
