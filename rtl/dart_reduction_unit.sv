// dart_reduction_unit: the Reduction Unit of the Vector Machine. Reduces one
// VLEN-lane BF16 vector per operation, either to its maximum and the index of
// that maximum in a single pass (V_RED_MAX_IDX) or to its sum (V_RED_SUM).
// A running result is kept so that a logit row longer than VLEN (a vocabulary
// chunk, V_chunk/VLEN passes) is reduced across several operations: with
// acc_en high the new vector is combined with the previous result.
//
// Structure: a binary tree of log2(VLEN) registered levels (pairwise max with
// index, or pairwise BF16 add) followed by one combine stage with the running
// result, so a result appears LAT = log2(VLEN)+1 cycles after in_valid; a new
// vector may enter every cycle. For VLEN=8 this gives the 4-cycle V_RED_MAX
// the paper reports. Ties pick the lower index (as argmax does). base_idx is
// added to the lane index so the index is global over the vocabulary.
// The sum uses the same tree (the paper's 20-cycle V_RED_SUM pipeline is not
// described) and BF16 rounding at each level.
module dart_reduction_unit
  import dart_pkg::*;
#(
  parameter int unsigned VLEN  = VLEN_D,
  parameter int unsigned IDX_W = 32,
  localparam int unsigned LV   = $clog2(VLEN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             op_sum,     // 0: max with index, 1: sum
  input  logic             acc_en,     // combine with the running result
  input  logic [IDX_W-1:0] base_idx,
  input  bf16_t            in_vec [VLEN],
  output logic             out_valid,
  output bf16_t            out_val,
  output logic [IDX_W-1:0] out_idx
);
  bf16_t            lvl_v [LV+1][VLEN];
  logic [IDX_W-1:0] lvl_i [LV+1][VLEN];
  logic             vld   [LV+1];
  logic             op_q  [LV+1];
  logic             acc_q [LV+1];

  always_comb begin
    for (int i = 0; i < int'(VLEN); i++) begin
      lvl_v[0][i] = in_vec[i];
      lvl_i[0][i] = base_idx + IDX_W'(i);
    end
    vld[0]   = in_valid;
    op_q[0]  = op_sum;
    acc_q[0] = acc_en;
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    localparam int unsigned W = VLEN >> (l + 1);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l+1]   <= 1'b0;
        op_q[l+1]  <= 1'b0;
        acc_q[l+1] <= 1'b0;
        for (int i = 0; i < int'(VLEN); i++) begin
          lvl_v[l+1][i] <= '0;
          lvl_i[l+1][i] <= '0;
        end
      end else begin
        vld[l+1]   <= vld[l];
        op_q[l+1]  <= op_q[l];
        acc_q[l+1] <= acc_q[l];
        for (int i = 0; i < int'(W); i++) begin
          if (op_q[l]) begin
            lvl_v[l+1][i] <= bf16_add(lvl_v[l][2*i], lvl_v[l][2*i+1]);
            lvl_i[l+1][i] <= lvl_i[l][2*i];
          end else if (bf16_gt(lvl_v[l][2*i+1], lvl_v[l][2*i])) begin
            lvl_v[l+1][i] <= lvl_v[l][2*i+1];
            lvl_i[l+1][i] <= lvl_i[l][2*i+1];
          end else begin
            lvl_v[l+1][i] <= lvl_v[l][2*i];
            lvl_i[l+1][i] <= lvl_i[l][2*i];
          end
        end
        for (int i = int'(W); i < int'(VLEN); i++) begin
          lvl_v[l+1][i] <= '0;
          lvl_i[l+1][i] <= '0;
        end
      end
    end
  end

  // final combine with the running result
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_val   <= '0;
      out_idx   <= '0;
    end else begin
      out_valid <= vld[LV];
      if (vld[LV]) begin
        if (!acc_q[LV]) begin
          out_val <= lvl_v[LV][0];
          out_idx <= lvl_i[LV][0];
        end else if (op_q[LV]) begin
          out_val <= bf16_add(out_val, lvl_v[LV][0]);
        end else if (bf16_gt(lvl_v[LV][0], out_val)) begin
          out_val <= lvl_v[LV][0];
          out_idx <= lvl_i[LV][0];
        end
      end
    end
  end
endmodule
