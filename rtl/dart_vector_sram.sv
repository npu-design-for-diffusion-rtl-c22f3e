// dart_vector_sram: the Vector SRAM, the high-throughput scratchpad of the
// vector data path. Each row holds VLEN BF16 elements. It holds tiled
// activations during the transformer pass, and during sampling the logit
// chunks streamed from HBM and the exp(z-m) values written back in place.
// Ports: one synchronous read port (data one cycle after rd_en) and one write
// port with a per-element write enable, so the matrix unit can write a BLEN
// wide slice of a row and S_MAP_V_FP can write L lanes. A write and a read of
// the same row in one cycle return the old data.
// Default depth: the paper sizes the buffer as 3*B*L + V_chunk elements in
// edge mode; with B=16, L=32 and V_chunk=4096 (where the paper finds latency
// and bandwidth saturate) that is 5632 elements, i.e. 3 rows of 2048, rounded
// up to DEPTH=4. Written as an array (a macro in silicon).
module dart_vector_sram
  import dart_pkg::*;
#(
  parameter int unsigned VLEN  = VLEN_D,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output bf16_t           rd_data [VLEN],
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [VLEN-1:0] wr_mask,
  input  bf16_t           wr_data [VLEN]
);
  bf16_t mem [DEPTH][VLEN];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en)
      for (int i = 0; i < int'(VLEN); i++)
        if (wr_mask[i]) mem[wr_addr][i] <= wr_data[i];
  end
endmodule
