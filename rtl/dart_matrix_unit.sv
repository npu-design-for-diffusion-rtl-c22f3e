// dart_matrix_unit: the DART Matrix Machine datapath. NSUB = MLEN/BLEN
// systolic sub-arrays of BLEN x BLEN PEs are tiled side by side along the
// reduction dimension K and fed an MLEN-wide slice of activations and weights
// in parallel: in one cycle sub-array s receives k-step s*BLEN+t of the slice.
// A result adder tree (the M_SUM operation) adds the NSUB partial-sum tiles
// element by element; Buf(Y) holds the INT32 result and casts it to BF16 one
// output row per cycle for write-back to the Vector SRAM.
//
// Interface: clear zeroes every accumulator. in_valid with x_*/w_* streams one
// k-step into each sub-array; a slice of K = MLEN takes BLEN cycles, and
// further slices accumulate. sum_req (a pulse) waits until the arrays have
// drained (2*BLEN-1 cycles after the last in_valid), latches the adder tree
// output into Buf(Y) and then emits rows 0..BLEN-1 on y_row with y_valid, one
// per cycle; busy is high from sum_req until the last row. The accumulator is
// fixed point with ACC_FRAC fractional bits (own choice); the cast to BF16
// rounds to nearest. Sizes follow the paper; the handshake is own choice.
module dart_matrix_unit
  import dart_pkg::*;
#(
  parameter int unsigned BLEN     = BLEN_D,
  parameter int unsigned MLEN     = MLEN_D,
  parameter int unsigned ELEM_W   = 8,
  parameter int unsigned ACC_FRAC = 16,
  localparam int unsigned NSUB    = MLEN / BLEN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic signed [ELEM_W-1:0] x_elem  [NSUB][BLEN],
  input  mxscale_t                 x_scale [NSUB][BLEN],
  input  logic signed [ELEM_W-1:0] w_elem  [NSUB][BLEN],
  input  mxscale_t                 w_scale [NSUB][BLEN],
  input  logic                     sum_req,
  output logic                     busy,
  output logic                     y_valid,
  output logic [$clog2(BLEN)-1:0]  y_idx,
  output bf16_t                    y_row   [BLEN]
);
  localparam int unsigned DRAIN = 2 * BLEN - 1;

  logic signed [31:0] part [NSUB][BLEN][BLEN];
  logic signed [31:0] tree [BLEN][BLEN];
  logic signed [31:0] ybuf [BLEN][BLEN];

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    dart_systolic_array #(.BLEN(BLEN), .ELEM_W(ELEM_W), .ACC_FRAC(ACC_FRAC)) u_sa (
      .clk, .rst_n, .clear, .in_valid,
      .a_elem (x_elem[s]), .a_scale(x_scale[s]),
      .b_elem (w_elem[s]), .b_scale(w_scale[s]),
      .acc    (part[s])
    );
  end

  // result adder tree over the sub-arrays
  always_comb begin
    for (int r = 0; r < BLEN; r++) begin
      for (int c = 0; c < BLEN; c++) begin
        tree[r][c] = '0;
        for (int s = 0; s < NSUB; s++) tree[r][c] = tree[r][c] + part[s][r][c];
      end
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_OUT} state_e;
  state_e                      state;
  logic [$clog2(DRAIN+1):0]    since_in;   // cycles since the last in_valid
  logic [$clog2(BLEN)-1:0]     row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      since_in <= '0;
    end else if (in_valid) begin
      since_in <= '0;
    end else if (since_in < ($clog2(DRAIN+1)+1)'(DRAIN)) begin
      since_in <= since_in + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      row     <= '0;
      y_valid <= 1'b0;
      y_idx   <= '0;
      for (int r = 0; r < BLEN; r++) begin
        y_row[r] <= '0;
        for (int c = 0; c < BLEN; c++) ybuf[r][c] <= '0;
      end
    end else begin
      y_valid <= 1'b0;
      case (state)
        S_IDLE: if (sum_req) state <= S_DRAIN;
        S_DRAIN: begin
          if (since_in >= ($clog2(DRAIN+1)+1)'(DRAIN) && !in_valid) begin
            ybuf  <= tree;
            row   <= '0;
            state <= S_OUT;
          end
        end
        S_OUT: begin
          for (int c = 0; c < BLEN; c++) y_row[c] <= bf16_from_int(ybuf[row][c], ACC_FRAC);
          y_valid <= 1'b1;
          y_idx   <= row;
          row     <= row + 1'b1;
          if (row == ($clog2(BLEN))'(BLEN - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || y_valid;
endmodule
