// dart_decoder: instruction buffer, decoder and issue logic of the NPU.
//
// The host pushes 64-bit instructions (op, rd, rs1, rs2, imm; see dart_pkg)
// through a valid/ready port into a small instruction queue. The head of the
// queue is decoded into the resources it touches and issued in order when
// nothing it depends on is still busy (stall-on-dependency):
//   - the sequencer of the multi-cycle operations (exec_busy),
//   - the Vector SRAM prefetch engine, for any instruction that reads or
//     writes the Vector SRAM or starts another vector transfer,
//   - the Matrix SRAM prefetch engine, for any instruction that reads or
//     writes the Matrix SRAM or starts another matrix transfer.
// A prefetch therefore overlaps with every later instruction that does not
// touch its SRAM (scalar work, Int/FP SRAM work, GEMM streaming on already
// loaded buffers), which is the double-buffered HBM overlap of the paper.
// Scalar register-to-register instructions and single-cycle SRAM accesses
// complete in the issue cycle (is_single); all others hand over to the
// sequencer (exec_busy rises the next cycle).
// Outputs: issue pulses with the issued instruction; dep_stall is high in a
// cycle where the head is held only by a busy prefetch engine.
// Follows the paper: in-order issue with stall on dependency, the prefetch
// engines of both SRAMs. Own choices: the queue depth, the encoding and the
// coarse per-SRAM dependency rule.
module dart_decoder
  import dart_pkg::*;
#(
  parameter int unsigned IQ_DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  instr_t in_instr,
  input  logic   exec_busy,
  input  logic   v_pf_busy,
  input  logic   m_pf_busy,
  output logic   head_valid,
  output instr_t head,
  output logic   issue,
  output logic   is_single,
  output logic   dep_stall
);
  logic [63:0] q_data;
  logic        q_valid;
  logic        uses_v, uses_m, blocked;

  dart_out_fifo #(.W(64), .DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_instr),
    .out_valid(q_valid), .out_ready(issue), .out_data(q_data), .count());

  assign head_valid = q_valid;
  assign head       = instr_t'(q_data);

  always_comb begin
    uses_v    = 1'b0;
    uses_m    = 1'b0;
    is_single = 1'b0;
    unique case (head.op)
      OP_H_PREFETCH_V, OP_H_STORE_V: uses_v = 1'b1;
      OP_H_PREFETCH_M:               uses_m = 1'b1;
      OP_M_MM, OP_M_TMM, OP_M_DEQ_V, OP_B_NORM_K: begin uses_v = 1'b1; uses_m = 1'b1; end
      OP_M_SUM, OP_V_ADD_VV, OP_V_SUB_VV, OP_V_MUL_VV, OP_V_MUL_VF, OP_V_EXP_V,
      OP_V_RED_MAX_IDX, OP_V_RED_SUM, OP_V_TOPK_MASK, OP_S_MAP_V_FP,
      OP_B_CALIB, OP_B_SCALE_Q: uses_v = 1'b1;
      OP_NOP, OP_S_LI_INT, OP_S_ADDI_INT, OP_S_ADD_INT, OP_S_SUB_INT, OP_S_MUL_INT,
      OP_S_DIV_INT, OP_S_LI_FP, OP_S_ADD_FP, OP_S_SUB_FP, OP_S_MUL_FP, OP_S_DIV_FP,
      OP_S_EXP_FP, OP_S_RECIP, OP_S_SQRT, OP_S_ST_FP, OP_S_ST_INT: is_single = 1'b1;
      default: ;
    endcase
  end

  assign blocked   = (uses_v && v_pf_busy) || (uses_m && m_pf_busy);
  assign issue     = q_valid && !exec_busy && !blocked;
  assign dep_stall = q_valid && !exec_busy && blocked;
endmodule
