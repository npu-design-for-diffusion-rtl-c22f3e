// tb_dart_top_full: the NPU at its default sizes (BLEN 64, MLEN 512,
// VLEN 2048, 512-bit HBM beats), taken through two complete operations:
//   1. one GEMM tile: 64 activation rows of K = 512 (BF16, quantized to MX at
//      the array boundary) times 512 weight rows of 64 output columns (MX),
//      summed by the adder tree into the Vector SRAM and stored to HBM; two
//      output rows are checked against a real-arithmetic reference;
//   2. the sampling of one generation block of L = 32 positions over one
//      VLEN-wide vocabulary chunk: max/argmax, exp, sum, reciprocal, FP/Int
//      SRAM write-back, map, masked-position test, top-k (k = 4), masked
//      select and token output; all 32 committed tokens are checked.
// The HBM models answer without stalls to keep the run short.
module tb_dart_top_full;
  import dart_pkg::*;
  import dart_tb_pkg::*;

  localparam int BLEN = BLEN_D, MLEN = MLEN_D, VLEN = VLEN_D, BEAT_W = 512;
  localparam int VBEATS = VLEN * 16 / BEAT_W;                         // 64
  localparam int MBEATS = (MLEN * 8 + MLEN / 32 * 8 + BEAT_W - 1) / BEAT_W;   // 9
  localparam int L = 32, K = 4, MASK_ID = 999999, NCHK = 2;
  localparam int HV_X = 0, HV_LOGIT = 4096, HV_OUT = 8192;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready;
  instr_t instr;
  logic hv_rd_req_valid, hv_rd_req_ready, hv_rd_resp_valid, hv_wr_valid, hv_wr_ready;
  logic [31:0] hv_rd_req_addr, hv_wr_addr;
  logic [BEAT_W-1:0] hv_rd_resp_data, hv_wr_data;
  logic hm_rd_req_valid, hm_rd_req_ready, hm_rd_resp_valid;
  logic [31:0] hm_rd_req_addr;
  logic [BEAT_W-1:0] hm_rd_resp_data;
  logic tok_valid, tok_ready = 1, busy;
  logic [31:0] tok_data;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dart_top dut (.*);

  hbm_model #(.BEAT_W(BEAT_W), .AW(14), .LAT(6), .STALL(1'b0)) u_hv (
    .clk, .rd_req_valid(hv_rd_req_valid), .rd_req_ready(hv_rd_req_ready), .rd_req_addr(hv_rd_req_addr),
    .rd_resp_valid(hv_rd_resp_valid), .rd_resp_data(hv_rd_resp_data),
    .wr_valid(hv_wr_valid), .wr_ready(hv_wr_ready), .wr_addr(hv_wr_addr), .wr_data(hv_wr_data));
  hbm_model #(.BEAT_W(BEAT_W), .AW(13), .LAT(6), .STALL(1'b0)) u_hm (
    .clk, .rd_req_valid(hm_rd_req_valid), .rd_req_ready(hm_rd_req_ready), .rd_req_addr(hm_rd_req_addr),
    .rd_resp_valid(hm_rd_resp_valid), .rd_resp_data(hm_rd_resp_data),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));

  instr_t prog[$];
  function automatic instr_t mk(input opcode_e op, input int rd, input int rs1, input int rs2,
                                input longint imm);
    instr_t i;
    i.op = op; i.rd = 5'(rd); i.rs1 = 5'(rs1); i.rs2 = 5'(rs2); i.imm = 41'(imm);
    return i;
  endfunction
  task automatic li(input int r, input int v);
    prog.push_back(mk(OP_S_LI_INT, r, 0, 0, v));
  endtask
  task automatic hv_put_lane(input int row_addr, input int lane, input logic [15:0] v);
    u_hv.mem[row_addr + lane / 32][(lane % 32) * 16 +: 16] = v;
  endtask
  function automatic logic [15:0] hv_get_lane(input int row_addr, input int lane);
    return u_hv.mem[row_addr + lane / 32][(lane % 32) * 16 +: 16];
  endfunction

  real xm   [NCHK][MLEN];        // the activation rows that are checked
  int  we   [MLEN][BLEN];        // weight elements, columns 0..BLEN-1
  int  peak [L];
  real conf [L];
  int  x_init [L];
  int  tokens [$];

  initial begin
    int  t, a, perm_t;
    real y, mag, got;
    int  perm [L];
    bit  sel  [L];
    logic [MBEATS*BEAT_W-1:0] mrow;

    for (int p = 0; p < L; p++) perm[p] = p;
    for (int p = L - 1; p > 0; p--) begin
      a = $urandom_range(p); perm_t = perm[p]; perm[p] = perm[a]; perm[a] = perm_t;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    // activations: 64 rows, lanes 0..511 (rows 0 and 1 are checked)
    for (int i = 0; i < BLEN; i++)
      for (int k = 0; k < MLEN; k++) begin
        t = $urandom_range(2000);
        if (i < NCHK) xm[i][k] = bf2r(r2bf((real'(t) - 1000.0) / 1000.0));
        hv_put_lane(HV_X + i * VBEATS, k, r2bf((real'(t) - 1000.0) / 1000.0));
      end
    // weights: 512 rows of 512 MX elements with block scale -7
    for (int k = 0; k < MLEN; k++) begin
      mrow = '0;
      for (int n = 0; n < MLEN; n++) begin
        t = $urandom_range(200);
        mrow[n*8 +: 8] = 8'(t - 100);
        if (n < BLEN) we[k][n] = t - 100;
      end
      for (int bb = 0; bb < MLEN / 32; bb++) mrow[MLEN*8 + bb*8 +: 8] = 8'(-7);
      for (int bt = 0; bt < MBEATS; bt++) u_hm.mem[k * MBEATS + bt] = mrow[bt*BEAT_W +: BEAT_W];
    end
    // logits: one VLEN chunk per position, a clear peak whose height sets the confidence
    for (int p = 0; p < L; p++) begin
      real s, m;
      peak[p] = $urandom_range(VLEN - 1);
      s = 0.0;
      m = bf2r(r2bf(2.0 + 0.25 * real'(perm[p])));
      for (int v = 0; v < VLEN; v++) begin
        logic [15:0] z;
        t = $urandom_range(3000);
        z = (v == peak[p]) ? r2bf(m) : r2bf(-real'(t) / 1000.0);
        hv_put_lane(HV_LOGIT + p * VBEATS, v, z);
        s += $exp(bf2r(z) - m);
      end
      conf[p] = 1.0 / s;
      x_init[p] = (p % 4 == 0) ? 3000 + p : MASK_ID;
    end

    // ---------- GEMM tile ----------
    li(1, 0); li(2, HV_X); li(3, 0);
    for (int i = 0; i < BLEN; i++) begin
      li(4, i);
      prog.push_back(mk(OP_H_PREFETCH_V, 0, 4, 2, i * VBEATS));
    end
    for (int k = 0; k < MLEN; k++) begin
      li(4, k);
      prog.push_back(mk(OP_H_PREFETCH_M, 0, 4, 3, k * MBEATS));
    end
    li(5, BLEN);
    prog.push_back(mk(OP_M_MM, 0, 1, 1, (1 << 16) | 0));
    prog.push_back(mk(OP_M_SUM, 5, 0, 0, 0));
    li(2, HV_OUT);
    for (int i = 0; i < NCHK; i++) begin
      li(4, BLEN + i);
      prog.push_back(mk(OP_H_STORE_V, 0, 4, 2, i * VBEATS));
    end

    // ---------- sampling of one block ----------
    li(10, 0); li(13, 0); li(17, MASK_ID); li(18, K); li(19, L); li(23, 0);
    li(15, 0); li(16, 32); li(20, 96); li(21, 64); li(12, 1);
    for (int p = 0; p < L; p++) begin
      li(22, x_init[p]);
      prog.push_back(mk(OP_S_ST_INT, 22, 23, 0, p));
    end
    for (int p = 0; p < L; p++) begin
      li(3, HV_LOGIT + p * VBEATS);
      li(5, p);
      prog.push_back(mk(OP_H_PREFETCH_V, 0, 10, 3, 0));
      prog.push_back(mk(OP_V_RED_MAX_IDX, 1, 10, 13, 0));
      prog.push_back(mk(OP_V_EXP_V, 10, 10, 1, 0));
      prog.push_back(mk(OP_V_RED_SUM, 2, 10, 0, 0));
      prog.push_back(mk(OP_S_RECIP, 3, 2, 0, 0));
      prog.push_back(mk(OP_S_ST_FP, 3, 5, 0, 0));
      prog.push_back(mk(OP_S_ST_INT, 1, 5, 0, 64));
    end
    prog.push_back(mk(OP_S_MAP_V_FP, 12, 0, 0, L));
    prog.push_back(mk(OP_V_EQ_INT, 16, 15, 17, L));
    prog.push_back(mk(OP_V_TOPK_MASK, 18, 12, 16, (L << 16) | 96));
    prog.push_back(mk(OP_V_SELECT_INT, 15, 20, 19, (0 << 16) | 64));
    prog.push_back(mk(OP_S_OUT_TOK, 0, 15, 0, L));

    foreach (prog[i]) begin
      @(negedge clk);
      instr_valid = 1;
      instr = prog[i];
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
    end
    @(negedge clk);
    instr_valid = 0;
    while (tokens.size() < L) @(posedge clk);
    repeat (5) @(posedge clk);
    while (busy) @(posedge clk);

    // GEMM rows
    for (int i = 0; i < NCHK; i++)
      for (int n = 0; n < BLEN; n++) begin
        // error bound: each activation is rounded to half a step of its MX
        // block (step = 2^(E-6), E the block's largest exponent), weighted by
        // |w|/128, plus BF16 rounding of the result
        y = 0.0; mag = 0.0;
        for (int k = 0; k < MLEN; k++) begin
          real bm;
          if (k % 32 == 0) begin
            bm = 0.0;
            for (int j = k; j < k + 32; j++) bm = (xm[i][j] > bm) ? xm[i][j] : ((-xm[i][j] > bm) ? -xm[i][j] : bm);
            bm = 2.0 ** ($floor($ln(bm) / $ln(2.0) + 1e-9) - 6.0);
          end
          y   += xm[i][k] * real'(we[k][n]) / 128.0;
          mag += bm * ((we[k][n] < 0) ? -we[k][n] : we[k][n]) / 128.0;
        end
        got = bf2r(hv_get_lane(HV_OUT + i * VBEATS, n));
        check(close(got, y, 0.01, 0.75 * mag + 0.01), $sformatf("Y[%0d][%0d] got %f want %f", i, n, got, y));
      end
    // tokens
    for (int p = 0; p < L; p++) sel[p] = 0;
    for (int n = 0; n < K; n++) begin
      a = -1;
      for (int p = 0; p < L; p++)
        if (x_init[p] == MASK_ID && !sel[p] && (a < 0 || conf[p] > conf[a])) a = p;
      sel[a] = 1;
    end
    for (int p = 0; p < L; p++)
      check(tokens[p] == (sel[p] ? peak[p] : x_init[p]),
            $sformatf("pos %0d token %0d want %0d", p, tokens[p], sel[p] ? peak[p] : x_init[p]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && tok_valid && tok_ready) tokens.push_back(int'(tok_data));
endmodule
