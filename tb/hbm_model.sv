// hbm_model: behavioural stand-in for the off-chip HBM and its controller,
// used only by testbenches. Beat-addressed memory of 2^AW beats of BEAT_W
// bits. Read requests are accepted when rd_req_ready is high (randomly
// withheld when STALL is set) and answered in order LAT cycles later; writes
// are accepted likewise. Contents start as a function of the address so tests
// can predict them: beat a holds {BEAT_W/32 copies of a*2654435761 + word}.
module hbm_model #(
  parameter int unsigned BEAT_W = 512,
  parameter int unsigned AW     = 12,
  parameter int unsigned LAT    = 6,
  parameter bit          STALL  = 1'b1
) (
  input  logic              clk,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [31:0]       rd_req_addr,
  output logic              rd_resp_valid,
  output logic [BEAT_W-1:0] rd_resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [31:0]       wr_addr,
  input  logic [BEAT_W-1:0] wr_data
);
  logic [BEAT_W-1:0] mem [1 << AW];
  logic [BEAT_W-1:0] pipe_d [LAT];
  logic              pipe_v [LAT];

  function automatic logic [BEAT_W-1:0] init_beat(input int a);
    logic [BEAT_W-1:0] b;
    for (int w = 0; w < int'(BEAT_W / 32); w++) b[w*32 +: 32] = 32'(a) * 32'd2654435761 + 32'(w);
    return b;
  endfunction

  initial begin
    for (int a = 0; a < (1 << AW); a++) mem[a] = init_beat(a);
    for (int i = 0; i < int'(LAT); i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
    rd_req_ready = 1;
    wr_ready = 1;
  end

  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      pipe_v[0] <= 1'b1;
      pipe_d[0] <= mem[rd_req_addr[AW-1:0]];
    end else begin
      pipe_v[0] <= 1'b0;
    end
    for (int i = 1; i < int'(LAT); i++) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    if (wr_valid && wr_ready) mem[wr_addr[AW-1:0]] <= wr_data;
    rd_req_ready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
    wr_ready     <= STALL ? ($urandom_range(3) != 0) : 1'b1;
  end

  assign rd_resp_valid = pipe_v[LAT-1];
  assign rd_resp_data  = pipe_d[LAT-1];
endmodule
