// tb_dart_fp_sram: scalar writes at random addresses, then synchronous scalar
// reads and the dense vector view (used by S_MAP_V_FP) are compared with a
// shadow copy.
module tb_dart_fp_sram;
  import dart_pkg::*;
  localparam int E = 64;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  bf16_t wr_data = 0, rd_data, vec_out [E], sh [E];
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
  dart_fp_sram #(.ENTRIES(E)) dut (.*);
  initial begin
    for (int i = 0; i < E; i++) sh[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'($urandom); wr_data = 16'($urandom);
      rd_en = 1; rd_addr = 6'($urandom);
      @(negedge clk);
      wr_en = 0; rd_en = 0;
      sh[wr_addr] = wr_data;
      if (rd_addr != wr_addr) check(rd_data == sh[rd_addr], "scalar read");
      for (int i = 0; i < E; i++) check(vec_out[i] == sh[i], "vector view");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
