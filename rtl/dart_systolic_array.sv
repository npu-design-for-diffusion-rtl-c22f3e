// dart_systolic_array: a BLEN x BLEN output-stationary grid of dart_pe.
//
// Each cycle with in_valid high the array takes one step of the reduction
// dimension k: a_elem[i] is A[i][k] for output row i and b_elem[j] is W[k][j]
// for output column j, each with its MX scale. Input skew registers (the
// staggered buffers at the array edge) delay row i and column j by i and j
// cycles, so that A[i][k] and W[k][j] meet in PE(i,j). PE(i,j) accumulates
// C[i][j] = sum_k A[i][k]*W[k][j]*2^(sa+sw) in fixed point.
//
// Timing: a tile of BLEN k-steps is streamed in BLEN cycles; the last product
// reaches PE(BLEN-1,BLEN-1) 2*BLEN-2 cycles after it entered, so acc is final
// DRAIN = 2*BLEN-1 cycles after the last in_valid. clear zeroes all
// accumulators. Sizes follow the paper (BLEN x BLEN sub-array, output
// stationary); the skew registers and the parallel acc read-out are own choices.
module dart_systolic_array
  import dart_pkg::*;
#(
  parameter int unsigned BLEN     = BLEN_D,
  parameter int unsigned ELEM_W   = 8,
  parameter int unsigned ACC_FRAC = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic signed [ELEM_W-1:0] a_elem  [BLEN],
  input  mxscale_t                 a_scale [BLEN],
  input  logic signed [ELEM_W-1:0] b_elem  [BLEN],
  input  mxscale_t                 b_scale [BLEN],
  output logic signed [31:0]       acc     [BLEN][BLEN]
);
  // horizontal (a) and vertical (b) links; index BLEN is the exit side
  logic                     ah_v [BLEN][BLEN+1];
  logic signed [ELEM_W-1:0] ah_e [BLEN][BLEN+1];
  mxscale_t                 ah_s [BLEN][BLEN+1];
  logic                     bv_v [BLEN+1][BLEN];
  logic signed [ELEM_W-1:0] bv_e [BLEN+1][BLEN];
  mxscale_t                 bv_s [BLEN+1][BLEN];

  for (genvar i = 0; i < BLEN; i++) begin : g_skew
    // delay line of length i for row i (and column i)
    logic                     av [i+1];
    logic signed [ELEM_W-1:0] ae [i+1];
    mxscale_t                 as [i+1];
    logic                     bvv[i+1];
    logic signed [ELEM_W-1:0] be [i+1];
    mxscale_t                 bs [i+1];
    assign av[0]  = in_valid;
    assign ae[0]  = a_elem[i];
    assign as[0]  = a_scale[i];
    assign bvv[0] = in_valid;
    assign be[0]  = b_elem[i];
    assign bs[0]  = b_scale[i];
    for (genvar d = 0; d < i; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          av[d+1]  <= 1'b0;
          ae[d+1]  <= '0;
          as[d+1]  <= '0;
          bvv[d+1] <= 1'b0;
          be[d+1]  <= '0;
          bs[d+1]  <= '0;
        end else begin
          av[d+1]  <= av[d];
          ae[d+1]  <= ae[d];
          as[d+1]  <= as[d];
          bvv[d+1] <= bvv[d];
          be[d+1]  <= be[d];
          bs[d+1]  <= bs[d];
        end
      end
    end
    assign ah_v[i][0] = av[i];
    assign ah_e[i][0] = ae[i];
    assign ah_s[i][0] = as[i];
    assign bv_v[0][i] = bvv[i];
    assign bv_e[0][i] = be[i];
    assign bv_s[0][i] = bs[i];
  end

  for (genvar r = 0; r < BLEN; r++) begin : g_row
    for (genvar c = 0; c < BLEN; c++) begin : g_col
      dart_pe #(.ELEM_W(ELEM_W), .ACC_FRAC(ACC_FRAC)) u_pe (
        .clk, .rst_n, .clear,
        .a_valid    (ah_v[r][c]),   .a_elem    (ah_e[r][c]),   .a_scale    (ah_s[r][c]),
        .b_valid    (bv_v[r][c]),   .b_elem    (bv_e[r][c]),   .b_scale    (bv_s[r][c]),
        .a_valid_out(ah_v[r][c+1]), .a_elem_out(ah_e[r][c+1]), .a_scale_out(ah_s[r][c+1]),
        .b_valid_out(bv_v[r+1][c]), .b_elem_out(bv_e[r+1][c]), .b_scale_out(bv_s[r+1][c]),
        .acc        (acc[r][c])
      );
    end
  end
endmodule
