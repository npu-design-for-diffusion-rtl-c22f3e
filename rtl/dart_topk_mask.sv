// dart_topk_mask: streaming insertion top-k (V_TOPK_MASK). Over the L
// confidence values of one generation block (lanes 0..len-1 of conf) it
// selects the k largest among the positions whose cand bit is set (the still
// masked positions) and returns an LMAX-bit transfer mask with those positions
// set.
//
// How: a sorted list of KMAX (value, position) slots is kept. One position is
// streamed per cycle; it is compared with every slot in parallel and inserted
// in order, the slots below it shift down by one and the last drops out, so
// area is O(KMAX) comparators as the paper states. Equal values keep the
// earlier position first. Positions with cand=0 are skipped; if fewer than k
// candidates exist, all of them are selected. Only the first k slots (k <= KMAX
// at run time) form the mask.
// Timing: start samples len and k and inserts position 0 in the same cycle;
// position i is inserted i cycles after start; done and mask appear len
// cycles after start (32 cycles for L=32, 64 for L=64, as the paper reports).
module dart_topk_mask
  import dart_pkg::*;
#(
  parameter int unsigned LMAX = VLEN_D,
  parameter int unsigned KMAX = 64,
  localparam int unsigned PW  = $clog2(LMAX)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [PW:0]          len,
  input  logic [$clog2(KMAX):0] k,
  input  bf16_t                conf [LMAX],
  input  logic [LMAX-1:0]      cand,
  output logic                 busy,
  output logic                 done,
  output logic [LMAX-1:0]      mask
);
  bf16_t           sv [KMAX];
  logic [PW-1:0]   sp [KMAX];
  logic            sok[KMAX];
  logic [PW:0]     pos, len_q;
  logic [$clog2(KMAX):0] k_q;
  logic            run;

  logic [PW:0]     cur;
  bf16_t           nv;
  logic            ncand;
  logic [KMAX-1:0] beats;  // new value goes above slot j

  always_comb begin
    cur   = start ? '0 : pos;
    nv    = conf[cur[PW-1:0]];
    ncand = cand[cur[PW-1:0]];
    for (int j = 0; j < int'(KMAX); j++)
      beats[j] = !sok[j] || bf16_gt(nv, sv[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      pos   <= '0;
      len_q <= '0;
      k_q   <= '0;
      done  <= 1'b0;
      for (int j = 0; j < int'(KMAX); j++) begin
        sv[j]  <= '0;
        sp[j]  <= '0;
        sok[j] <= 1'b0;
      end
    end else begin
      done <= 1'b0;
      if (start || run) begin
        if (start) begin
          len_q <= len;
          k_q   <= k;
        end
        // insertion of element cur; on start the list is empty
        if (ncand) begin
          for (int j = 0; j < int'(KMAX); j++) begin
            if (start) begin
              sok[j] <= (j == 0);
              sv[j]  <= nv;
              sp[j]  <= cur[PW-1:0];
            end else if (beats[j] && (j == 0 || !beats[j-1])) begin
              sv[j]  <= nv;
              sp[j]  <= cur[PW-1:0];
              sok[j] <= 1'b1;
            end else if (j > 0 && beats[j-1]) begin
              sv[j]  <= sv[j-1];
              sp[j]  <= sp[j-1];
              sok[j] <= sok[j-1];
            end
          end
        end else if (start) begin
          for (int j = 0; j < int'(KMAX); j++) sok[j] <= 1'b0;
        end
        pos <= cur + 1'b1;
        run <= (cur + 1'b1) < (start ? len : len_q);
        if ((cur + 1'b1) >= (start ? len : len_q)) begin
          done <= 1'b1;
        end
      end
    end
  end

  // mask from the final list (valid in the cycle done is high)
  always_comb begin
    logic [LMAX-1:0] m;
    m = '0;
    for (int j = 0; j < int'(KMAX); j++)
      if (sok[j] && ($clog2(KMAX)+1)'(j) < k_q) m[sp[j]] = 1'b1;
    mask = m;
  end

  assign busy = run;
endmodule
