// tb_dart_pe: random MX operand pairs are fed to one PE; the accumulator is
// compared with an integer reference sum of a*b*2^(sa+sb+ACC_FRAC). Also
// checks operand forwarding and clear.
module tb_dart_pe;
  import dart_pkg::*;
  localparam int ACC_FRAC = 16;
  logic clk = 0, rst_n = 0, clear = 0, av = 0, bv = 0;
  logic signed [7:0] ae = 0, be = 0;
  mxscale_t as = 0, bs = 0;
  logic avo, bvo;
  logic signed [7:0] aeo, beo;
  mxscale_t aso, bso;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  longint ref_acc;

  dart_pe #(.ELEM_W(8), .ACC_FRAC(ACC_FRAC)) dut (
    .clk, .rst_n, .clear, .a_valid(av), .a_elem(ae), .a_scale(as),
    .b_valid(bv), .b_elem(be), .b_scale(bs), .a_valid_out(avo), .a_elem_out(aeo),
    .a_scale_out(aso), .b_valid_out(bvo), .b_elem_out(beo), .b_scale_out(bso), .acc);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ref_acc = 0;
    for (int n = 0; n < 200; n++) begin
      ae = 8'($urandom); be = 8'($urandom);
      as = mxscale_t'($urandom_range(12) - 14);  // -14..-2
      bs = mxscale_t'($urandom_range(8) - 10);
      av = ($urandom_range(3) != 0); bv = 1;
      if (av) begin
        longint p; int sh;
        p = longint'(ae) * longint'(be);
        sh = int'(as) + int'(bs) + ACC_FRAC;
        ref_acc += (sh >= 0) ? (p <<< sh) : (p >>> (-sh));
      end
      @(negedge clk);
      check(acc == 32'(ref_acc), $sformatf("acc %0d ref %0d", acc, ref_acc));
      check(aeo == ae && beo == be && aso == as && bso == bs && avo == av && bvo == bv, "forward");
    end
    av = 0;
    clear = 1; @(negedge clk); clear = 0;
    check(acc == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
