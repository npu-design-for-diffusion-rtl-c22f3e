// dart_mx_dequantizer: MXINT -> BF16. Each element is multiplied by 2^scale of
// its block (an exact power-of-two rescale) and rounded to BF16. Used where MX
// data read back from the KV cache / Matrix SRAM must enter the BF16 vector
// path. The paper only names the block; the element/scale encoding matches
// dart_mx_quantizer. Timing: one register stage, one vector per cycle.
module dart_mx_dequantizer
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
  input  logic signed [ELEM_W-1:0] in_elem  [N],
  input  mxscale_t                 in_scale [NB],
  output logic                     out_valid,
  output bf16_t                    out_data [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < int'(N); i++) out_data[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < int'(N); i++)
          out_data[i] <= bf16_from_int(32'(in_elem[i]), -int'(in_scale[i / BLK]));
    end
  end
endmodule
