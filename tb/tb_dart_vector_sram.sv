// tb_dart_vector_sram: random full and masked row writes against a shadow
// model; reads return data one cycle later, and a read of a row written in
// the same cycle returns the old contents.
module tb_dart_vector_sram;
  import dart_pkg::*;
  localparam int VLEN = 16, DEPTH = 8;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [2:0] rd_addr = 0, wr_addr = 0;
  logic [VLEN-1:0] wr_mask = 0;
  bf16_t rd_data [VLEN], wr_data [VLEN];
  bf16_t shadow [DEPTH][VLEN];
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
  dart_vector_sram #(.VLEN(VLEN), .DEPTH(DEPTH)) dut (.*);
  initial begin
    for (int r = 0; r < DEPTH; r++) for (int i = 0; i < VLEN; i++) shadow[r][i] = 0;
    for (int i = 0; i < VLEN; i++) wr_data[i] = 0;
    @(negedge clk);
    for (int r = 0; r < DEPTH; r++) begin
      wr_en = 1; wr_addr = 3'(r); wr_mask = '1; @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      bf16_t expect_row [VLEN];
      wr_en = $urandom_range(1); wr_addr = 3'($urandom_range(DEPTH - 1));
      wr_mask = VLEN'($urandom);
      for (int i = 0; i < VLEN; i++) wr_data[i] = 16'($urandom);
      rd_en = 1; rd_addr = 3'($urandom_range(DEPTH - 1));
      expect_row = shadow[rd_addr];
      if (wr_en) for (int i = 0; i < VLEN; i++) if (wr_mask[i]) shadow[wr_addr][i] = wr_data[i];
      @(negedge clk);
      for (int i = 0; i < VLEN; i++) check(rd_data[i] == expect_row[i], $sformatf("row %0d lane %0d", rd_addr, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
