// tb_dart_out_fifo: random push/pop traffic with random stalls on both sides,
// including filling the FIFO completely; the output order and the count must
// match a queue model, and no data may be accepted when full.
module tb_dart_out_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = 0, out_data;
  logic [3:0] count;
  logic [31:0] q [$];
  int full_seen = 0;
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
  dart_out_fifo #(.W(32), .DEPTH(DEPTH)) dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = (t < 1000) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      in_data = $urandom;
      out_ready = (t < 300) ? ($urandom_range(4) == 0) : ($urandom_range(1) == 1);
      #1;
      check(int'(count) == q.size(), "count");
      check(in_ready == (q.size() < DEPTH), "in_ready");
      if (q.size() == DEPTH) full_seen++;
      check(out_valid == (q.size() > 0), "out_valid");
      if (out_valid) check(out_data == q[0], "order");
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(full_seen > 0, "fifo became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
