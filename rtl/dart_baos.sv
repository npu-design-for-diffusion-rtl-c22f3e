// dart_baos: Block-Adaptive Online Smoothing of the KV cache.
//
// At the warm step of each generation block the unit is calibrated on the
// freshly computed key (or value) vectors: for each of D channels it tracks
// the minimum, maximum and sum over the tokens streamed in (one D-wide token
// vector per cycle). finalize then forms, per channel,
//   center c = mean (mode 0) or (min+max)/2 (mode 1, "minmax")
//   factor f = max(max - c, c - min),  then f = f^alpha
// with alpha in Q1.8 (256 = 1.0; the paper evaluates 1.0, 0.9 and 0.6).
// Afterwards, every key vector written to the cache is normalised to
// (x - c)/f (op norm; computed as (x - c) * (1/f) with 1/f stored at
// finalize) before MX quantization, and queries are scaled by f (op qscale) so
// that Q_s K_s^T is computed on the smoothed keys without un-scaling the
// cache. SLOTS independent sets of factors are held (one per head of the
// HLEN = MLEN/D heads processed together), selected by slot.
//
// Timing: calibration accepts one vector per cycle; finalize takes one cycle;
// norm and qscale results appear one cycle after in_valid.
// Follows the paper: the formulas, warm-step calibration, K normalisation and
// Q scaling. Own choices: BF16 arithmetic for the statistics, f = 0 replaced
// by 1 (a constant channel), the slot count, the interface.
module dart_baos
  import dart_pkg::*;
#(
  parameter int unsigned D     = HEAD_DIM_D,
  parameter int unsigned SLOTS = MLEN_D / HEAD_DIM_D,
  localparam int unsigned SW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [SW-1:0] slot,
  input  logic          calib_clear,
  input  logic          calib_valid,
  input  logic          finalize,
  input  logic          mode_minmax,
  input  logic [8:0]    alpha,
  input  logic          in_valid,
  input  logic          op_qscale,    // 0: (x-c)/f, 1: x*f
  input  bf16_t         in_vec  [D],
  output logic          out_valid,
  output bf16_t         out_vec [D],
  output bf16_t         center  [D],
  output bf16_t         factor  [D]
);
  bf16_t       mn   [SLOTS][D];
  bf16_t       mx   [SLOTS][D];
  bf16_t       sm   [SLOTS][D];
  logic [15:0] cnt  [SLOTS];
  bf16_t       c_q  [SLOTS][D];
  bf16_t       f_q  [SLOTS][D];
  bf16_t       fi_q [SLOTS][D];

  assign center = c_q[slot];
  assign factor = f_q[slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int d = 0; d < int'(D); d++) out_vec[d] <= '0;
      for (int s = 0; s < int'(SLOTS); s++) begin
        cnt[s] <= '0;
        for (int d = 0; d < int'(D); d++) begin
          mn[s][d]   <= BF16_MAX;
          mx[s][d]   <= BF16_NEG_MAX;
          sm[s][d]   <= '0;
          c_q[s][d]  <= '0;
          f_q[s][d]  <= BF16_ONE;
          fi_q[s][d] <= BF16_ONE;
        end
      end
    end else begin
      out_valid <= in_valid;
      if (calib_clear) begin
        cnt[slot] <= '0;
        for (int d = 0; d < int'(D); d++) begin
          mn[slot][d] <= BF16_MAX;
          mx[slot][d] <= BF16_NEG_MAX;
          sm[slot][d] <= '0;
        end
      end else if (calib_valid) begin
        cnt[slot] <= cnt[slot] + 1'b1;
        for (int d = 0; d < int'(D); d++) begin
          if (bf16_gt(mn[slot][d], in_vec[d])) mn[slot][d] <= in_vec[d];
          if (bf16_gt(in_vec[d], mx[slot][d])) mx[slot][d] <= in_vec[d];
          sm[slot][d] <= bf16_add(sm[slot][d], in_vec[d]);
        end
      end
      if (finalize) begin
        bf16_t inv_n;
        inv_n = bf16_recip(bf16_from_int(32'(cnt[slot]), 0));
        for (int d = 0; d < int'(D); d++) begin
          bf16_t c, r1, r2, f;
          c  = mode_minmax ? bf16_mul(bf16_add(mn[slot][d], mx[slot][d]), 16'h3F00)
                           : bf16_mul(sm[slot][d], inv_n);
          r1 = bf16_sub(mx[slot][d], c);
          r2 = bf16_sub(c, mn[slot][d]);
          f  = bf16_gt(r2, r1) ? r2 : r1;
          f  = bf16_pow_alpha(f, alpha);
          if (bf16_is_zero(f)) f = BF16_ONE;
          c_q[slot][d]  <= c;
          f_q[slot][d]  <= f;
          fi_q[slot][d] <= bf16_recip(f);
        end
      end
      if (in_valid)
        for (int d = 0; d < int'(D); d++)
          out_vec[d] <= op_qscale ? bf16_mul(in_vec[d], f_q[slot][d])
                                  : bf16_mul(bf16_sub(in_vec[d], c_q[slot][d]), fi_q[slot][d]);
    end
  end
endmodule
