// dart_scalar_machine: the Scalar Machine, an Int Unit with 32 general-purpose
// integer registers gp[0..31] and an FP Unit with 32 BF16 registers
// fp[0..31].
//   Int unit: LI, ADDI, ADD, SUB, MUL, DIV (token and address arithmetic)
//   FP unit:  LI, ADD, SUB, MUL, DIV, EXP, RECIP (S_RECIP), SQRT
// An instruction presented with exec is executed in one cycle: the result is
// written to gp[rd] or fp[rd] on the next clock edge. Two external write
// ports let the vector units and the SRAM loads deposit results
// (e.g. V_RED_MAX_IDX writes the maximum to fp and its index to gp). Read
// ports expose registers to the decoder for addresses and broadcast scalars.
// gp[0] is an ordinary register. Register count and single-cycle timing are
// this design's choices; the operation list follows the paper's Scalar Machine
// figure (+ - x / on int and fp, exp, 1/x, sqrt).
module dart_scalar_machine
  import dart_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        exec,
  input  instr_t      instr,
  // external writes (lower priority than exec to the same register)
  input  logic        gp_wr_en,
  input  logic [4:0]  gp_wr_addr,
  input  logic [31:0] gp_wr_data,
  input  logic        fp_wr_en,
  input  logic [4:0]  fp_wr_addr,
  input  bf16_t       fp_wr_data,
  // register read ports
  input  logic [4:0]  gp_ra [3],
  output logic [31:0] gp_rd [3],
  input  logic [4:0]  fp_ra [2],
  output bf16_t       fp_rd [2]
);
  logic [31:0] gp [32];
  bf16_t       fp [32];

  logic        gp_we, fp_we;
  logic [31:0] gp_res;
  bf16_t       fp_res;

  always_comb begin
    for (int i = 0; i < 3; i++) gp_rd[i] = gp[gp_ra[i]];
    for (int i = 0; i < 2; i++) fp_rd[i] = fp[fp_ra[i]];
  end

  always_comb begin
    logic [31:0] a, b;
    bf16_t       fa, fb;
    a      = gp[instr.rs1];
    b      = gp[instr.rs2];
    fa     = fp[instr.rs1];
    fb     = fp[instr.rs2];
    gp_we  = 1'b0;
    fp_we  = 1'b0;
    gp_res = '0;
    fp_res = '0;
    if (exec) begin
      case (instr.op)
        OP_S_LI_INT:   begin gp_we = 1'b1; gp_res = instr.imm[31:0]; end
        OP_S_ADDI_INT: begin gp_we = 1'b1; gp_res = a + instr.imm[31:0]; end
        OP_S_ADD_INT:  begin gp_we = 1'b1; gp_res = a + b; end
        OP_S_SUB_INT:  begin gp_we = 1'b1; gp_res = a - b; end
        OP_S_MUL_INT:  begin gp_we = 1'b1; gp_res = a * b; end
        OP_S_DIV_INT:  begin gp_we = 1'b1; gp_res = (b == 0) ? '1 : a / b; end
        OP_S_LI_FP:    begin fp_we = 1'b1; fp_res = instr.imm[15:0]; end
        OP_S_ADD_FP:   begin fp_we = 1'b1; fp_res = bf16_add(fa, fb); end
        OP_S_SUB_FP:   begin fp_we = 1'b1; fp_res = bf16_sub(fa, fb); end
        OP_S_MUL_FP:   begin fp_we = 1'b1; fp_res = bf16_mul(fa, fb); end
        OP_S_DIV_FP:   begin fp_we = 1'b1; fp_res = bf16_div(fa, fb); end
        OP_S_EXP_FP:   begin fp_we = 1'b1; fp_res = bf16_exp(fa); end
        OP_S_RECIP:    begin fp_we = 1'b1; fp_res = bf16_recip(fa); end
        OP_S_SQRT:     begin fp_we = 1'b1; fp_res = bf16_sqrt(fa); end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) begin
        gp[i] <= '0;
        fp[i] <= '0;
      end
    end else begin
      if (gp_wr_en) gp[gp_wr_addr] <= gp_wr_data;
      if (fp_wr_en) fp[fp_wr_addr] <= fp_wr_data;
      if (gp_we) gp[instr.rd] <= gp_res;
      if (fp_we) fp[instr.rd] <= fp_res;
    end
  end
endmodule
