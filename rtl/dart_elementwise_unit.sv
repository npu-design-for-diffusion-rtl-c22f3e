// dart_elementwise_unit: the Elementwise Unit of the Vector Machine with its
// scalar Broadcast input. VLEN BF16 lanes compute, per operation:
//   EW_ADD  a+b        EW_SUB  a-b        EW_MUL  a*b
//   EW_MULS a*s        EW_EXPS exp(a-s)   (s = broadcast scalar)
// EW_EXPS is the V_EXP_V step of Stable-Max sampling: with s = max logit it
// yields exp(z_i - m), written back in place over the logit row.
// Timing: inputs registered, result registered: out_valid two cycles after
// in_valid, one vector per cycle. The paper gives the operations; lane
// arithmetic (dart_pkg BF16 functions) and the two-stage pipeline are this
// design's (the paper's unit reports 7 cycles including SRAM access).
module dart_elementwise_unit
  import dart_pkg::*;
#(
  parameter int unsigned VLEN = VLEN_D
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [2:0]  op,
  input  bf16_t       a [VLEN],
  input  bf16_t       b [VLEN],
  input  bf16_t       s,
  output logic        out_valid,
  output bf16_t       y [VLEN]
);
  localparam logic [2:0] EW_ADD = 3'd0, EW_SUB = 3'd1, EW_MUL = 3'd2, EW_MULS = 3'd3, EW_EXPS = 3'd4;

  logic       v_q;
  logic [2:0] op_q;
  bf16_t      a_q [VLEN];
  bf16_t      b_q [VLEN];
  bf16_t      s_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      op_q      <= '0;
      s_q       <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < int'(VLEN); i++) begin
        a_q[i] <= '0;
        b_q[i] <= '0;
        y[i]   <= '0;
      end
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
      if (in_valid) begin
        op_q <= op;
        a_q  <= a;
        b_q  <= b;
        s_q  <= s;
      end
      if (v_q) begin
        for (int i = 0; i < int'(VLEN); i++) begin
          case (op_q)
            EW_ADD:  y[i] <= bf16_add(a_q[i], b_q[i]);
            EW_SUB:  y[i] <= bf16_sub(a_q[i], b_q[i]);
            EW_MUL:  y[i] <= bf16_mul(a_q[i], b_q[i]);
            EW_MULS: y[i] <= bf16_mul(a_q[i], s_q);
            EW_EXPS: y[i] <= bf16_exp(bf16_sub(a_q[i], s_q));
            default: y[i] <= a_q[i];
          endcase
        end
      end
    end
  end
endmodule
