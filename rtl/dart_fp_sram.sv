// dart_fp_sram: the FP SRAM, a separate storage domain for per-position BF16
// confidence scalars and intermediate FP scalars. Capacity is
// max(L, VLEN) entries as the paper gives (2048 for VLEN=2048). It is written
// one scalar per cycle from the FP register file (S_ST_FP) and read one
// scalar per cycle (S_LD_FP, own addition); for S_MAP_V_FP the whole store is
// presented as one dense vector (vec_out), of which the first L lanes are
// copied into a Vector SRAM row. Scalar reads are synchronous (one cycle).
module dart_fp_sram
  import dart_pkg::*;
#(
  parameter int unsigned ENTRIES = VLEN_D,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  bf16_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output bf16_t         rd_data,
  output bf16_t         vec_out [ENTRIES]
);
  bf16_t mem [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data <= '0;
      for (int i = 0; i < int'(ENTRIES); i++) mem[i] <= '0;
    end else begin
      if (wr_en) mem[wr_addr] <= wr_data;
      if (rd_en) rd_data <= mem[rd_addr];
    end
  end

  assign vec_out = mem;
endmodule
