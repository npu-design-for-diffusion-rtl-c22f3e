// dart_pe: one processing element of the DART systolic array.
//
// The PE multiplies two MX elements, element(a) from the left neighbour and
// element(b) from the top neighbour, adds their block scales scale(a)+scale(b),
// shifts the integer product arithmetically by that sum (plus ACC_FRAC, the
// number of fractional bits this design keeps in the accumulator) and adds it
// into a 32-bit accumulator that stays in the PE (output-stationary dataflow).
// Operands and scales are registered and passed on to the right and lower
// neighbours one cycle later, together with their valid bit.
//
// Follows the paper: multiplier, scale adder, arithmetic shifter, INT32
// accumulator with partial-sum feedback, operand forwarding. Own choices:
// scales are signed exponents, the accumulator has ACC_FRAC fractional bits,
// a synchronous clear starts a new output tile, and the accumulator is read in
// parallel (acc) instead of being shifted out through the neighbours.
// Timing: one MAC per cycle, accumulator updated on the clock edge after a
// valid input; operands appear on the *_out ports one cycle after input.
module dart_pe
  import dart_pkg::*;
#(
  parameter int unsigned ELEM_W   = 8,
  parameter int unsigned ACC_FRAC = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     a_valid,
  input  logic signed [ELEM_W-1:0] a_elem,
  input  mxscale_t                 a_scale,
  input  logic                     b_valid,
  input  logic signed [ELEM_W-1:0] b_elem,
  input  mxscale_t                 b_scale,
  output logic                     a_valid_out,
  output logic signed [ELEM_W-1:0] a_elem_out,
  output mxscale_t                 a_scale_out,
  output logic                     b_valid_out,
  output logic signed [ELEM_W-1:0] b_elem_out,
  output mxscale_t                 b_scale_out,
  output logic signed [31:0]       acc
);
  logic signed [2*ELEM_W-1:0] prod;
  logic signed [9:0]          shamt;
  logic signed [31:0]         shifted;

  always_comb begin
    prod    = a_elem * b_elem;
    shamt   = 10'(a_scale) + 10'(b_scale) + 10'(ACC_FRAC);
    shifted = ashift(32'(prod), int'(shamt));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc         <= '0;
      a_valid_out <= 1'b0;
      b_valid_out <= 1'b0;
      a_elem_out  <= '0;
      b_elem_out  <= '0;
      a_scale_out <= '0;
      b_scale_out <= '0;
    end else begin
      a_valid_out <= a_valid;
      b_valid_out <= b_valid;
      a_elem_out  <= a_elem;
      b_elem_out  <= b_elem;
      a_scale_out <= a_scale;
      b_scale_out <= b_scale;
      if (clear) acc <= '0;
      else if (a_valid && b_valid) acc <= acc + shifted;
    end
  end
endmodule
