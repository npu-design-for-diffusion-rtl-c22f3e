// tb_dart_elementwise_unit: VLEN=16. Each operation (add, sub, mul, scalar
// mul, exp(a-s)) on random vectors is compared lane by lane with real
// arithmetic; the result must appear two cycles after the input.
module tb_dart_elementwise_unit;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  localparam int VLEN = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] op = 0;
  bf16_t a [VLEN], b [VLEN], s = 0, y [VLEN];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  dart_elementwise_unit #(.VLEN(VLEN)) dut (.*);
  initial begin
    for (int i = 0; i < VLEN; i++) begin a[i] = 0; b[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      op = 3'(t % 5);
      for (int i = 0; i < VLEN; i++) begin
        a[i] = r2bf((real'($urandom_range(4000)) - 2000.0) / 256.0);
        b[i] = r2bf((real'($urandom_range(4000)) - 2000.0) / 256.0);
      end
      s = r2bf((real'($urandom_range(4000)) - 2000.0) / 256.0);
      in_valid = 1; @(negedge clk); in_valid = 0;
      check(!out_valid, "not after one cycle");
      @(negedge clk);
      check(out_valid, "valid after two cycles");
      for (int i = 0; i < VLEN; i++) begin
        real ra, rb, rs, w;
        ra = bf2r(a[i]); rb = bf2r(b[i]); rs = bf2r(s);
        case (op)
          0: w = ra + rb;
          1: w = ra - rb;
          2: w = ra * rb;
          3: w = ra * rs;
          default: w = $exp(bf2r(r2bf(ra - rs)));
        endcase
        check(close(bf2r(y[i]), w, 0.012, 0.02), $sformatf("op %0d lane %0d %f want %f", op, i, bf2r(y[i]), w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
