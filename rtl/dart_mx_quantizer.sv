// dart_mx_quantizer: dynamic BF16 -> MXINT quantizer at the systolic-array
// input boundary (and on the KV write path after BAOS smoothing).
//
// N BF16 values are split into blocks of BLK; each block gets one shared
// power-of-two scale chosen from its largest exponent E as E-(ELEM_W-2), so
// that the largest magnitude fits the ELEM_W-bit signed element. Every value
// is divided by 2^scale, rounded to nearest and clamped to
// +-(2^(ELEM_W-1)-1). The paper gives the function (dynamic MX quantization
// with per-block scales); the scale rule, rounding and clamping are this
// design's choices. Timing: one register stage, out_valid follows in_valid
// by one cycle, one vector per cycle.
module dart_mx_quantizer
  import dart_pkg::*;
#(
  parameter int unsigned N      = MLEN_D,
  parameter int unsigned BLK    = MX_BLOCK_D,
  parameter int unsigned ELEM_W = 8,
  localparam int unsigned NB    = N / BLK
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  bf16_t                    in_data  [N],
  output logic                     out_valid,
  output logic signed [ELEM_W-1:0] out_elem [N],
  output mxscale_t                 out_scale[NB]
);
  localparam int EMAX = (1 << (ELEM_W - 1)) - 1;

  logic signed [ELEM_W-1:0] elem_c  [N];
  mxscale_t                 scale_c [NB];

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      logic [7:0] emax;
      int         sc;
      emax = 8'd0;
      for (int i = 0; i < int'(BLK); i++)
        if (in_data[b*BLK+i][14:7] > emax) emax = in_data[b*BLK+i][14:7];
      sc = (emax == 8'd0) ? 0 : int'(emax) - 127 - (int'(ELEM_W) - 2);
      if (sc < -128) sc = -128;
      if (sc > 127) sc = 127;
      scale_c[b] = mxscale_t'(sc);
      for (int i = 0; i < int'(BLK); i++) begin
        logic signed [31:0] v;
        // value / 2^sc with one extra bit, then round half away from zero
        v = bf16_to_fix(in_data[b*BLK+i], 1 - sc);
        v = (v >= 0) ? ((v + 1) >>> 1) : -((-v + 1) >>> 1);
        if (v > EMAX) v = EMAX;
        if (v < -EMAX) v = -EMAX;
        elem_c[b*BLK+i] = ELEM_W'(v);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < int'(N); i++) out_elem[i] <= '0;
      for (int b = 0; b < int'(NB); b++) out_scale[b] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_elem  <= elem_c;
        out_scale <= scale_c;
      end
    end
  end
endmodule
