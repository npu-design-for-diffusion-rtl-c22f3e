// tb_dart_int_sram: fills the Int SRAM through the scalar port, then runs
// V_SELECT_INT, the mask_id compare, the top-k mask store and the output
// stream (with random back-pressure) and compares every entry with a model.
// Each vector operation must take one cycle per element.
module tb_dart_int_sram;
  import dart_pkg::*;
  localparam int E = 256, LMAX = 32;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, start = 0, busy, done, out_valid, out_ready = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0, dst_base = 0, m_base = 0, a_base = 0, b_base = 0, cand_base = 0;
  logic [31:0] wr_data = 0, rd_data, cmp_val = 0, out_data;
  logic [1:0] op = 0;
  logic [8:0] len = 0;
  logic [LMAX-1:0] wmask = 0, cand;
  logic [31:0] m [E];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  dart_int_sram #(.ENTRIES(E), .LMAX(LMAX)) dut (.*);
  int cyc = 0;
  always @(posedge clk) cyc++;
  task automatic vop(input int o, input int d, input int mb, input int ab, input int bb, input int n);
    int t0;
    @(negedge clk);
    op = 2'(o); dst_base = 8'(d); m_base = 8'(mb); a_base = 8'(ab); b_base = 8'(bb); len = 9'(n);
    start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    if (o != 3) check(cyc - t0 == n + 1, $sformatf("op %0d cycles %0d", o, cyc - t0));
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < E; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 8'(i); wr_data = (i < 64) ? 32'($urandom_range(3)) : 32'($urandom); m[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    cmp_val = 2;
    vop(1, 128, 0, 0, 0, 32);                  // eq
    for (int i = 0; i < 32; i++) m[128 + i] = (m[i] == 2);
    vop(0, 160, 128, 64, 96, 32);              // select
    for (int i = 0; i < 32; i++) m[160 + i] = m[128 + i] != 0 ? m[64 + i] : m[96 + i];
    wmask = 32'($urandom);
    vop(2, 192, 0, 0, 0, 32);                  // mask store
    for (int i = 0; i < 32; i++) m[192 + i] = wmask[i];
    for (int i = 0; i < E; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = 8'(i); @(negedge clk); rd_en = 0;
      check(rd_data == m[i], $sformatf("entry %0d %h want %h", i, rd_data, m[i]));
    end
    cand_base = 128; #1;
    for (int i = 0; i < 32; i++) check(cand[i] == (m[128 + i] != 0), "cand");
    // output stream with back-pressure
    fork
      vop(3, 160, 0, 0, 0, 32);
      begin
        int got; got = 0;
        while (got < 32) begin
          @(negedge clk);
          out_ready = $urandom_range(1);
          #1;
          if (out_valid && out_ready) begin check(out_data == m[160 + got], "stream"); got++; end
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
