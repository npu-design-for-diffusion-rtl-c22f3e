// dart_out_fifo: synchronous FIFO between the Int SRAM and the host output
// interface, delivering committed token IDs. DEPTH entries of W bits, valid /
// ready handshakes on both sides (a transfer happens when valid and ready are
// both high), first-word-fall-through output. Depth is this design's choice
// (the paper only says a FIFO buffer couples the Int SRAM to the host).
module dart_out_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = count < (AW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wp] <= in_data;
        wp      <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // handshake rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  a_out_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
