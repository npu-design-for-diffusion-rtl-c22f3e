// tb_dart_prefetch: the engine moves rows (ROW_W = 1000 bits, so the last of
// 4 beats is partial) between a behavioural HBM with random stalls and a
// row sink with random back-pressure. Loaded rows must equal the HBM beats;
// stored rows are read back from the HBM model and compared.
module tb_dart_prefetch;
  localparam int ROW_W = 1000, BEAT_W = 256, NBEAT = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_store = 0;
  logic [31:0] cmd_hbm_addr = 0;
  logic [7:0] cmd_row = 0;
  logic [ROW_W-1:0] cmd_data = 0;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready, row_valid, row_ready = 0, busy;
  logic [31:0] rd_req_addr, wr_addr;
  logic [BEAT_W-1:0] rd_resp_data, wr_data;
  logic [7:0] row_addr;
  logic [ROW_W-1:0] row_data;
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
  dart_prefetch #(.ROW_W(ROW_W), .BEAT_W(BEAT_W), .SAW(8)) dut (.*);
  hbm_model #(.BEAT_W(BEAT_W), .AW(10)) u_hbm (.*);
  always @(negedge clk) row_ready = $urandom_range(1);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      logic [NBEAT*BEAT_W-1:0] want;
      int a;
      a = $urandom_range(200);
      // store a random row every third command, then load it back
      if (t % 3 == 0) begin
        @(negedge clk);
        cmd_store = 1; cmd_hbm_addr = 32'(a); cmd_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        cmd_data = {32{cmd_data[255:224]}} ^ cmd_data;
        cmd_valid = 1; @(negedge clk); cmd_valid = 0;
        while (busy) @(negedge clk);
        want = '0;
        want[ROW_W-1:0] = cmd_data;
        for (int b = 0; b < NBEAT; b++) check(u_hbm.mem[a + b] == want[b*BEAT_W +: BEAT_W], "stored beat");
      end
      for (int b = 0; b < NBEAT; b++) want[b*BEAT_W +: BEAT_W] = u_hbm.mem[a + b];
      @(negedge clk);
      cmd_store = 0; cmd_hbm_addr = 32'(a); cmd_row = 8'(t); cmd_valid = 1;
      @(negedge clk); cmd_valid = 0;
      #1;
      while (!(row_valid && row_ready)) begin @(negedge clk); #1; end
      check(row_data == want[ROW_W-1:0] && row_addr == 8'(t), $sformatf("loaded row %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
