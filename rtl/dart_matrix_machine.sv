// dart_matrix_machine: the Matrix Machine: Buf(X), Buf(W), the input
// quantizer and the matrix unit (sub-arrays, adder tree, Buf(Y)).
//
// Buf(X) holds a BLEN x MLEN activation tile in MX form: each BF16 row
// written on x_* passes the dynamic MX quantizer (one cycle) into row x_idx.
// Buf(W) holds an MLEN x BLEN weight tile: a Matrix SRAM row written on w_*
// lands either as k-step w_idx, taking the BLEN elements starting at
// col_base (w_trans = 0, weights stored K-major), or, transposed, as output
// column w_idx, taking all MLEN elements (w_trans = 1, e.g. cached keys stored
// token-major for Q K^T). go streams the buffered tile through the sub-arrays
// in BLEN cycles (k-step s*BLEN+t goes to sub-array s in cycle t); clear
// starts a new output tile; sum_req runs the adder tree (M_SUM) and Buf(Y)
// returns BLEN BF16 rows on y_*. busy covers streaming and summing.
// The buffers' names and the quantizer position follow the paper's
// architecture figure; the load interface and the transposed fill are this
// design's.
module dart_matrix_machine
  import dart_pkg::*;
#(
  parameter int unsigned BLEN     = BLEN_D,
  parameter int unsigned MLEN     = MLEN_D,
  parameter int unsigned BLK      = MX_BLOCK_D,
  parameter int unsigned ELEM_W   = 8,
  parameter int unsigned ACC_FRAC = 16,
  localparam int unsigned NSUB    = MLEN / BLEN,
  localparam int unsigned NB      = MLEN / BLK
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     x_valid,
  input  logic [$clog2(BLEN)-1:0]  x_idx,
  input  bf16_t                    x_row   [MLEN],
  input  logic                     w_valid,
  input  logic                     w_trans,
  input  logic [$clog2(MLEN)-1:0]  w_idx,
  input  logic [$clog2(MLEN)-1:0]  col_base,
  input  logic signed [ELEM_W-1:0] w_elem  [MLEN],
  input  mxscale_t                 w_escale[MLEN],
  input  logic                     clear,
  input  logic                     go,
  input  logic                     sum_req,
  output logic                     busy,
  output logic                     y_valid,
  output logic [$clog2(BLEN)-1:0]  y_idx,
  output bf16_t                    y_row   [BLEN]
);
  logic signed [ELEM_W-1:0] bx_e [BLEN][MLEN];
  mxscale_t                 bx_s [BLEN][NB];
  logic signed [ELEM_W-1:0] bw_e [MLEN][BLEN];
  mxscale_t                 bw_s [MLEN][BLEN];

  logic                     q_valid;
  logic signed [ELEM_W-1:0] q_elem  [MLEN];
  mxscale_t                 q_scale [NB];
  logic [$clog2(BLEN)-1:0]  x_idx_q;

  dart_mx_quantizer #(.N(MLEN), .BLK(BLK), .ELEM_W(ELEM_W)) u_xq (
    .clk, .rst_n, .in_valid(x_valid), .in_data(x_row),
    .out_valid(q_valid), .out_elem(q_elem), .out_scale(q_scale));

  // stream control
  logic                       streaming;
  logic [$clog2(BLEN)-1:0]    t;
  logic                       in_valid;
  logic signed [ELEM_W-1:0]   xe [NSUB][BLEN];
  mxscale_t                   xs [NSUB][BLEN];
  logic signed [ELEM_W-1:0]   we [NSUB][BLEN];
  mxscale_t                   ws [NSUB][BLEN];
  logic                       mu_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_idx_q   <= '0;
      streaming <= 1'b0;
      t         <= '0;
      for (int r = 0; r < int'(BLEN); r++) begin
        for (int k = 0; k < int'(MLEN); k++) bx_e[r][k] <= '0;
        for (int b = 0; b < int'(NB); b++) bx_s[r][b] <= '0;
      end
      for (int k = 0; k < int'(MLEN); k++)
        for (int c = 0; c < int'(BLEN); c++) begin
          bw_e[k][c] <= '0;
          bw_s[k][c] <= '0;
        end
    end else begin
      x_idx_q <= x_idx;
      if (q_valid) begin
        for (int k = 0; k < int'(MLEN); k++) bx_e[x_idx_q][k] <= q_elem[k];
        for (int b = 0; b < int'(NB); b++) bx_s[x_idx_q][b] <= q_scale[b];
      end
      if (w_valid) begin
        if (w_trans) begin
          for (int k = 0; k < int'(MLEN); k++) begin
            bw_e[k][w_idx[$clog2(BLEN)-1:0]] <= w_elem[k];
            bw_s[k][w_idx[$clog2(BLEN)-1:0]] <= w_escale[k];
          end
        end else begin
          for (int c = 0; c < int'(BLEN); c++) begin
            bw_e[w_idx][c] <= w_elem[($clog2(MLEN))'(col_base + ($clog2(MLEN))'(c))];
            bw_s[w_idx][c] <= w_escale[($clog2(MLEN))'(col_base + ($clog2(MLEN))'(c))];
          end
        end
      end
      if (go && !streaming) begin
        streaming <= 1'b1;
        t         <= '0;
      end else if (streaming) begin
        t <= t + 1'b1;
        if (t == ($clog2(BLEN))'(BLEN - 1)) streaming <= 1'b0;
      end
    end
  end

  assign in_valid = streaming;
  always_comb begin
    for (int s = 0; s < int'(NSUB); s++)
      for (int i = 0; i < int'(BLEN); i++) begin
        xe[s][i] = bx_e[i][s*BLEN + int'(t)];
        xs[s][i] = bx_s[i][(s*BLEN + int'(t)) / BLK];
        we[s][i] = bw_e[s*BLEN + int'(t)][i];
        ws[s][i] = bw_s[s*BLEN + int'(t)][i];
      end
  end

  dart_matrix_unit #(.BLEN(BLEN), .MLEN(MLEN), .ELEM_W(ELEM_W), .ACC_FRAC(ACC_FRAC)) u_mu (
    .clk, .rst_n, .clear, .in_valid,
    .x_elem(xe), .x_scale(xs), .w_elem(we), .w_scale(ws),
    .sum_req, .busy(mu_busy), .y_valid, .y_idx, .y_row);

  assign busy = streaming || go || mu_busy || sum_req;
endmodule
