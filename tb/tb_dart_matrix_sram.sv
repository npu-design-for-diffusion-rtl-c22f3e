// tb_dart_matrix_sram: writes random MX rows (elements and block scales) and
// reads them back in random order; each element must come back with its own
// value and the scale of its block.
module tb_dart_matrix_sram;
  import dart_pkg::*;
  localparam int MLEN = 64, BLK = 32, NB = 2, DEPTH = 16;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [3:0] rd_addr = 0, wr_addr = 0;
  logic signed [7:0] rd_elem [MLEN], wr_elem [MLEN];
  mxscale_t rd_escale [MLEN], wr_scale [NB];
  logic signed [7:0] se [DEPTH][MLEN];
  mxscale_t ss [DEPTH][NB];
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
  dart_matrix_sram #(.MLEN(MLEN), .BLK(BLK), .DEPTH(DEPTH)) dut (.*);
  initial begin
    @(negedge clk);
    for (int r = 0; r < DEPTH; r++) begin
      for (int i = 0; i < MLEN; i++) begin wr_elem[i] = 8'($urandom); se[r][i] = wr_elem[i]; end
      for (int b = 0; b < NB; b++) begin wr_scale[b] = 8'($urandom); ss[r][b] = wr_scale[b]; end
      wr_en = 1; wr_addr = 4'(r); @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 100; t++) begin
      rd_en = 1; rd_addr = 4'($urandom_range(DEPTH - 1)); @(negedge clk);
      for (int i = 0; i < MLEN; i++)
        check(rd_elem[i] == se[rd_addr][i] && rd_escale[i] == ss[rd_addr][i / BLK], $sformatf("row %0d el %0d", rd_addr, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
