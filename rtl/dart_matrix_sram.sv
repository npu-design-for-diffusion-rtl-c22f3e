// dart_matrix_sram: the Matrix SRAM, holding weights and KV tensors in MX
// format: each row is MLEN signed elements plus MLEN/BLK shared scales.
// Rows are written whole (from the HBM prefetch engine or from the BAOS
// quantized-K path). Reads are synchronous and return a row together with the
// scale of every element, so the loader can fill Buf(W) either
// non-transposed (row k -> k-step of the weight stream, one BLEN-column window
// selected by col_base) or transposed (row n -> one output column, all MLEN
// k-steps). The transposed/non-transposed choice is made by the loader in
// dart_decoder; the paper states that both access patterns are supported but
// not how. DEPTH (2*MLEN rows) is this design's choice: the paper gives no
// Matrix SRAM capacity.
module dart_matrix_sram
  import dart_pkg::*;
#(
  parameter int unsigned MLEN   = MLEN_D,
  parameter int unsigned BLK    = MX_BLOCK_D,
  parameter int unsigned ELEM_W = 8,
  parameter int unsigned DEPTH  = 2 * MLEN_D,
  localparam int unsigned NB    = MLEN / BLK,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output logic signed [ELEM_W-1:0] rd_elem  [MLEN],
  output mxscale_t                 rd_escale[MLEN],   // scale of each element
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic signed [ELEM_W-1:0] wr_elem  [MLEN],
  input  mxscale_t                 wr_scale [NB]
);
  logic signed [ELEM_W-1:0] mem_e [DEPTH][MLEN];
  mxscale_t                 mem_s [DEPTH][NB];
  mxscale_t                 rd_scale [NB];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_elem  <= mem_e[rd_addr];
      rd_scale <= mem_s[rd_addr];
    end
    if (wr_en) begin
      mem_e[wr_addr] <= wr_elem;
      mem_s[wr_addr] <= wr_scale;
    end
  end

  always_comb
    for (int i = 0; i < int'(MLEN); i++) rd_escale[i] = rd_scale[i / BLK];
endmodule
