// tb_dart_scalar_machine: loads integer and BF16 registers, runs every Int
// and FP unit operation with random operands and compares the register file
// (through the read ports) with integer and real-arithmetic references. Also
// checks the external write ports.
module tb_dart_scalar_machine;
  import dart_pkg::*;
  import dart_tb_pkg::*;
  logic clk = 0, rst_n = 0, exec = 0;
  instr_t instr;
  logic gp_wr_en = 0, fp_wr_en = 0;
  logic [4:0] gp_wr_addr = 0, fp_wr_addr = 0;
  logic [31:0] gp_wr_data = 0;
  bf16_t fp_wr_data = 0;
  logic [4:0] gp_ra [3], fp_ra [2];
  logic [31:0] gp_rd [3];
  bf16_t fp_rd [2];
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
  dart_scalar_machine dut (.*);
  task automatic run(input opcode_e op, input int rd, input int rs1, input int rs2, input longint imm);
    @(negedge clk);
    instr = '{op: op, rd: 5'(rd), rs1: 5'(rs1), rs2: 5'(rs2), imm: 41'(imm)};
    exec = 1; @(negedge clk); exec = 0;
  endtask
  initial begin
    instr = '0;
    for (int i = 0; i < 3; i++) gp_ra[i] = 0;
    for (int i = 0; i < 2; i++) fp_ra[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int a, b; real fa, fb, w; int o;
      a = $urandom_range(100000); b = $urandom_range(1000);
      a = a - 50000; b = b - 500;
      if (b == 0) b = 7;
      fa = (real'($urandom_range(4000)) + 1.0) / 64.0;
      fb = (real'($urandom_range(4000)) - 2000.5) / 64.0;
      run(OP_S_LI_INT, 1, 0, 0, a);
      run(OP_S_LI_INT, 2, 0, 0, b);
      run(OP_S_LI_FP, 1, 0, 0, r2bf(fa));
      run(OP_S_LI_FP, 2, 0, 0, r2bf(fb));
      fa = bf2r(r2bf(fa)); fb = bf2r(r2bf(fb));
      o = t % 6;
      case (o)
        0: run(OP_S_ADD_INT, 3, 1, 2, 0);
        1: run(OP_S_SUB_INT, 3, 1, 2, 0);
        2: run(OP_S_MUL_INT, 3, 1, 2, 0);
        3: run(OP_S_DIV_INT, 3, 1, 2, 0);
        4: run(OP_S_ADDI_INT, 3, 1, 0, 1234);
        default: run(OP_S_ADD_INT, 3, 2, 1, 0);
      endcase
      gp_ra[0] = 3; #1;
      case (o)
        0, 5: check(gp_rd[0] == 32'(a + b), "add");
        1: check(gp_rd[0] == 32'(a - b), "sub");
        2: check(gp_rd[0] == 32'(a * b), "mul");
        3: check(gp_rd[0] == 32'(a / b), $sformatf("div %0d/%0d=%0d", a, b, gp_rd[0]));
        default: check(gp_rd[0] == 32'(a + 1234), "addi");
      endcase
      o = t % 8;
      case (o)
        0: begin run(OP_S_ADD_FP, 3, 1, 2, 0); w = fa + fb; end
        1: begin run(OP_S_SUB_FP, 3, 1, 2, 0); w = fa - fb; end
        2: begin run(OP_S_MUL_FP, 3, 1, 2, 0); w = fa * fb; end
        3: begin run(OP_S_DIV_FP, 3, 1, 2, 0); w = fa / fb; end
        4: begin run(OP_S_RECIP, 3, 1, 0, 0); w = 1.0 / fa; end
        5: begin run(OP_S_SQRT, 3, 1, 0, 0); w = $sqrt(fa); end
        6: begin run(OP_S_EXP_FP, 3, 2, 0, 0); w = (fb > -80) ? $exp(fb / 1.0) : 0; end
        default: begin run(OP_S_EXP_FP, 3, 2, 0, 0); w = $exp(fb); end
      endcase
      fp_ra[0] = 3; #1;
      if (o >= 6 && fb > 80) w = bf2r(16'h7F7F);
      check(close(bf2r(fp_rd[0]), w, 0.016, 1e-6), $sformatf("fp op %0d: %f want %f", o, bf2r(fp_rd[0]), w));
    end
    // external write ports
    @(negedge clk); gp_wr_en = 1; gp_wr_addr = 9; gp_wr_data = 32'hCAFE0001;
    fp_wr_en = 1; fp_wr_addr = 9; fp_wr_data = 16'h4049;
    @(negedge clk); gp_wr_en = 0; fp_wr_en = 0; gp_ra[1] = 9; fp_ra[1] = 9; #1;
    check(gp_rd[1] == 32'hCAFE0001 && fp_rd[1] == 16'h4049, "external writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
