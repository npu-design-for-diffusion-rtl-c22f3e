// tb_dart_reduction_unit: VLEN=8. Random vectors are reduced to max+argmax
// and to sum, single and accumulated over 4 chunks (global index via
// base_idx), back to back. Results are compared with references; the max
// latency must be log2(VLEN)+1 = 4 cycles, as the paper reports for VLEN=8.
module tb_dart_reduction_unit;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  localparam int VLEN = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, op_sum = 0, acc_en = 0, out_valid;
  logic [31:0] base_idx = 0, out_idx;
  bf16_t in_vec [VLEN], out_val;
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
  dart_reduction_unit #(.VLEN(VLEN)) dut (.*);
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    for (int i = 0; i < VLEN; i++) in_vec[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      real mref, sref; int iref, t0;
      op_sum = t % 2;
      mref = -1e30; sref = 0; iref = 0;
      for (int c = 0; c < 4; c++) begin
        @(negedge clk);
        for (int i = 0; i < VLEN; i++) begin
          in_vec[i] = r2bf((real'($urandom_range(4000)) - 2000.0) / 64.0);
          if (t % 5 == 0 && i == 3) in_vec[i] = in_vec[1];   // a tie
          if (bf2r(in_vec[i]) > mref) begin mref = bf2r(in_vec[i]); iref = c * VLEN + i; end
          sref += bf2r(in_vec[i]);
        end
        base_idx = c * VLEN; acc_en = (c != 0); in_valid = 1;
        t0 = cyc;
      end
      @(negedge clk); in_valid = 0;
      while (cyc - t0 < 4 && !(out_valid && cyc - t0 >= 4)) @(negedge clk);
      while (!out_valid) @(negedge clk);
      if (!op_sum) begin
        check(cyc - t0 == 4, $sformatf("latency %0d", cyc - t0));
        check(bf2r(out_val) == mref && int'(out_idx) == iref, $sformatf("max %f@%0d want %f@%0d", bf2r(out_val), out_idx, mref, iref));
      end else begin
        check(close(bf2r(out_val), sref, 0.02, 1.5), $sformatf("sum %f want %f", bf2r(out_val), sref));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
