// dart_int_sram: the Int SRAM, the integer storage domain for token indices
// (argmax results), the current sequence x and boolean masks, kept apart from
// the vector data path. Capacity 2*B*L entries as the paper gives (1024 for
// B=16, L=32), 32 bits each.
//
// Besides scalar access (S_ST_INT write, S_LD_INT synchronous read) it owns a
// small sequencer for the integer vector operations of sampling phase 4,
// processing one element per cycle over len elements:
//   IV_SEL     dst[i] = m[i] != 0 ? a[i] : b[i]     (V_SELECT_INT, torch.where)
//   IV_EQ      dst[i] = (a[i] == cmp_val)           (m_idx = x == mask_id)
//   IV_WRMASK  dst[i] = wmask[i]                    (stores a V_TOPK_MASK result)
//   IV_OUT     streams dst[i] to out_* (to the output token FIFO), obeying out_ready
// start is accepted when idle; done pulses one cycle after the last element.
// cand exposes (mem[cand_base+i] != 0) for LMAX positions, the candidate bits
// V_TOPK_MASK needs. Element-per-cycle processing and the command encoding are
// this design's choices; the operations follow the paper's Algorithm 2.
module dart_int_sram
  import dart_pkg::*;
#(
  parameter int unsigned ENTRIES = 2 * B_D * L_D,
  parameter int unsigned LMAX    = L_D,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  // scalar port
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [31:0]     wr_data,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output logic [31:0]     rd_data,
  // vector sequencer
  input  logic            start,
  input  logic [1:0]      op,
  input  logic [AW-1:0]   dst_base,
  input  logic [AW-1:0]   m_base,
  input  logic [AW-1:0]   a_base,
  input  logic [AW-1:0]   b_base,
  input  logic [AW:0]     len,
  input  logic [31:0]     cmp_val,
  input  logic [LMAX-1:0] wmask,
  output logic            busy,
  output logic            done,
  output logic            out_valid,
  output logic [31:0]     out_data,
  input  logic            out_ready,
  // candidate bits for top-k
  input  logic [AW-1:0]   cand_base,
  output logic [LMAX-1:0] cand
);
  localparam logic [1:0] IV_SEL = 2'd0, IV_EQ = 2'd1, IV_WRMASK = 2'd2, IV_OUT = 2'd3;

  logic [31:0]     mem [ENTRIES];
  logic            run;
  logic [1:0]      op_q;
  logic [AW-1:0]   dst_q, m_q, a_q, b_q;
  logic [AW:0]     len_q, i_q;
  logic [31:0]     cmp_q;
  logic [LMAX-1:0] wmask_q;
  logic            step;

  assign busy      = run;
  assign out_valid = run && (op_q == IV_OUT);
  assign out_data  = mem[AW'(dst_q + i_q[AW-1:0])];
  assign step      = run && ((op_q != IV_OUT) || out_ready);

  always_comb
    for (int i = 0; i < int'(LMAX); i++) cand[i] = mem[AW'(cand_base + AW'(i))] != 32'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run     <= 1'b0;
      done    <= 1'b0;
      op_q    <= '0;
      dst_q   <= '0;
      m_q     <= '0;
      a_q     <= '0;
      b_q     <= '0;
      len_q   <= '0;
      i_q     <= '0;
      cmp_q   <= '0;
      wmask_q <= '0;
      rd_data <= '0;
      for (int i = 0; i < int'(ENTRIES); i++) mem[i] <= '0;
    end else begin
      done <= 1'b0;
      if (rd_en) rd_data <= mem[rd_addr];
      if (wr_en) mem[wr_addr] <= wr_data;
      if (start && !run) begin
        op_q    <= op;
        dst_q   <= dst_base;
        m_q     <= m_base;
        a_q     <= a_base;
        b_q     <= b_base;
        len_q   <= len;
        cmp_q   <= cmp_val;
        wmask_q <= wmask;
        i_q     <= '0;
        run     <= (len != 0);
        done    <= (len == 0);
      end else if (step) begin
        logic [AW-1:0] d;
        d = AW'(dst_q + i_q[AW-1:0]);
        case (op_q)
          IV_SEL:    mem[d] <= (mem[AW'(m_q + i_q[AW-1:0])] != 0) ? mem[AW'(a_q + i_q[AW-1:0])]
                                                                 : mem[AW'(b_q + i_q[AW-1:0])];
          IV_EQ:     mem[d] <= {31'd0, mem[AW'(a_q + i_q[AW-1:0])] == cmp_q};
          IV_WRMASK: mem[d] <= {31'd0, wmask_q[i_q[$clog2(LMAX)-1:0]]};
          default: ;
        endcase
        i_q <= i_q + 1'b1;
        if (i_q + 1'b1 == len_q) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
