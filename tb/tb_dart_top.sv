// tb_dart_top: end-to-end test of the NPU at reduced sizes (BLEN 4, MLEN 16,
// VLEN 32, D 8, MX block 8, 64-bit HBM beats). Behavioural HBM models with
// random stalls sit on both HBM paths; the host side pushes one program
// through the instruction port and takes output tokens with random
// back-pressure. The program has three parts:
//   1. the intra-block sampling flow for B = 2 sequences of a block of L = 8
//      positions over a vocabulary of V = 64 (two Vector SRAM chunks of 32):
//      per position, prefetch both logit chunks, chained max/argmax,
//      exp(z - m) in place, chained sum, 1/sum as confidence, store the
//      confidence to FP SRAM and the argmax to Int SRAM; per sequence, map the
//      confidences to a vector, find the still-masked positions, take the
//      top k = 2 of them, commit them with a masked select and stream the
//      sequence and the argmax tokens out;
//   2. a GEMM tile Y = X W1[:, 4..7] + X W2^T (non-transposed then transposed
//      weight load, accumulation, adder tree), plus V_ADD_VV and V_MUL_VF,
//      with results stored to HBM;
//   3. BAOS: min-max calibration on two key vectors, normalise a key into the
//      Matrix SRAM (MX), dequantize it back, and scale a query by f.
// All results are compared with a reference computed here in real
// arithmetic. Every mechanism is counted and must occur at least once.
module tb_dart_top;
  import dart_pkg::*;
  import dart_tb_pkg::*;

  localparam int BLEN = 4, MLEN = 16, VLEN = 32, D = 8, BLK = 8;
  localparam int VS_DEPTH = 32, MS_DEPTH = 32, INT_ENTRIES = 128, LMAX = 16, KMAX = 8;
  localparam int BEAT_W = 64, VBEATS = VLEN * 16 / BEAT_W, MBEATS = 3;
  localparam int NSEQ = 2, L = 8, V = 64, K = 2, MASK_ID = 99;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready;
  instr_t instr;
  logic hv_rd_req_valid, hv_rd_req_ready, hv_rd_resp_valid, hv_wr_valid, hv_wr_ready;
  logic [31:0] hv_rd_req_addr, hv_wr_addr;
  logic [BEAT_W-1:0] hv_rd_resp_data, hv_wr_data;
  logic hm_rd_req_valid, hm_rd_req_ready, hm_rd_resp_valid;
  logic [31:0] hm_rd_req_addr;
  logic [BEAT_W-1:0] hm_rd_resp_data;
  logic tok_valid, tok_ready = 0, busy;
  logic [31:0] tok_data;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dart_top #(.BLEN(BLEN), .MLEN(MLEN), .VLEN(VLEN), .D(D), .BLK(BLK), .VS_DEPTH(VS_DEPTH),
             .MS_DEPTH(MS_DEPTH), .FP_ENTRIES(VLEN), .INT_ENTRIES(INT_ENTRIES), .LMAX(LMAX),
             .KMAX(KMAX), .BEAT_W(BEAT_W), .HAW(32), .OUT_DEPTH(8)) dut (.*);

  hbm_model #(.BEAT_W(BEAT_W), .AW(10)) u_hv (
    .clk, .rd_req_valid(hv_rd_req_valid), .rd_req_ready(hv_rd_req_ready), .rd_req_addr(hv_rd_req_addr),
    .rd_resp_valid(hv_rd_resp_valid), .rd_resp_data(hv_rd_resp_data),
    .wr_valid(hv_wr_valid), .wr_ready(hv_wr_ready), .wr_addr(hv_wr_addr), .wr_data(hv_wr_data));
  hbm_model #(.BEAT_W(BEAT_W), .AW(8)) u_hm (
    .clk, .rd_req_valid(hm_rd_req_valid), .rd_req_ready(hm_rd_req_ready), .rd_req_addr(hm_rd_req_addr),
    .rd_resp_valid(hm_rd_resp_valid), .rd_resp_data(hm_rd_resp_data),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));

  // ---------------- mechanism counters ----------------
  int n_dep_stall, n_pf_overlap, n_chunk_chain, n_exp, n_topk, n_select, n_eq, n_map;
  int n_tmm_rows, n_mm_rows, n_sum_rows, n_tok_bp, n_hbm_stall, n_host_stall, n_store;
  int n_calib, n_norm, n_qscale, n_deq, n_recip;
  always @(posedge clk) if (rst_n) begin
    if (dut.dep_stall) n_dep_stall++;
    if (dut.issue && (dut.v_pf_busy || dut.m_pf_busy)) n_pf_overlap++;
    if (dut.red_in_valid && dut.ins.imm[0]) n_chunk_chain++;
    if (dut.ew_in_valid && dut.ew_op == 3'd4) n_exp++;
    if (dut.tk_done) n_topk++;
    if (dut.is_start && dut.is_op == 2'd0) n_select++;
    if (dut.is_start && dut.is_op == 2'd1) n_eq++;
    if (dut.seq_vs_wr && dut.ins.op == OP_S_MAP_V_FP) n_map++;
    if (dut.mm_w_valid && dut.ins.op == OP_M_TMM) n_tmm_rows++;
    if (dut.mm_w_valid && dut.ins.op == OP_M_MM) n_mm_rows++;
    if (dut.mm_y_valid) n_sum_rows++;
    if (tok_valid && !tok_ready) n_tok_bp++;
    if ((hv_rd_req_valid && !hv_rd_req_ready) || (hm_rd_req_valid && !hm_rd_req_ready)) n_hbm_stall++;
    if (instr_valid && !instr_ready) n_host_stall++;
    if (hv_wr_valid && hv_wr_ready) n_store++;
    if (dut.bz_fin) n_calib++;
    if (dut.bz_in_valid && dut.ins.op == OP_B_NORM_K) n_norm++;
    if (dut.bz_in_valid && dut.ins.op == OP_B_SCALE_Q) n_qscale++;
    if (dut.dq_in_valid) n_deq++;
    if (dut.sm_exec && dut.head.op == OP_S_RECIP) n_recip++;
  end

  // ---------------- program ----------------
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

  // HBM helpers
  task automatic hv_put_lane(input int row_addr, input int lane, input logic [15:0] v);
    u_hv.mem[row_addr + lane / 4][(lane % 4) * 16 +: 16] = v;
  endtask
  function automatic logic [15:0] hv_get_lane(input int row_addr, input int lane);
    return u_hv.mem[row_addr + lane / 4][(lane % 4) * 16 +: 16];
  endfunction

  // reference data
  real    logit [NSEQ][L][V];
  int     peak  [NSEQ][L];
  real    conf  [NSEQ][L];
  int     x_init[NSEQ][L];
  real    xm    [BLEN][MLEN];
  int     w1e   [MLEN][MLEN];
  int     w1s   [MLEN][2];
  int     w2e   [BLEN][MLEN];
  int     w2s   [BLEN][2];
  real    kv    [2][D];
  int     tokens[$];

  localparam int HV_LOGIT = 0, HV_X = 300, HV_KV = 340, HV_OUT = 400;

  initial begin
    int    perm [L];
    int    t, r, j, a, base, row, tmp;
    real   s, m, y, want, c, f, mn, mx, got, mag;
    bit    cand [L];
    bit    sel  [L];
    int    order[$];
    logic [15:0] bv;

    // ---------- data ----------
    for (int b = 0; b < NSEQ; b++) begin
      for (int p = 0; p < L; p++) perm[p] = p;
      for (int p = L - 1; p > 0; p--) begin
        j = $urandom_range(p); tmp = perm[p]; perm[p] = perm[j]; perm[j] = tmp;
      end
      for (int p = 0; p < L; p++) begin
        peak[b][p] = $urandom_range(V - 1);
        for (int v = 0; v < V; v++) begin
          t = $urandom_range(3000);
          logit[b][p][v] = bf2r(r2bf(-real'(t) / 1000.0));
        end
        logit[b][p][peak[b][p]] = bf2r(r2bf(1.0 + 0.6 * real'(perm[p])));
        m = logit[b][p][peak[b][p]];
        s = 0.0;
        for (int v = 0; v < V; v++) s += $exp(logit[b][p][v] - m);
        conf[b][p] = 1.0 / s;
        x_init[b][p] = ((p + b) % 3 == 0) ? 500 + p : MASK_ID;
      end
    end
    for (int i = 0; i < BLEN; i++)
      for (int k = 0; k < MLEN; k++) begin
        t = $urandom_range(4000);
        xm[i][k] = bf2r(r2bf((real'(t) - 2000.0) / 1000.0));
      end
    for (int k = 0; k < MLEN; k++) begin
      for (int n = 0; n < MLEN; n++) begin t = $urandom_range(200); w1e[k][n] = t - 100; end
      for (int bb = 0; bb < 2; bb++) begin t = $urandom_range(2); w1s[k][bb] = -8 + t; end
    end
    for (int n = 0; n < BLEN; n++) begin
      for (int k = 0; k < MLEN; k++) begin t = $urandom_range(200); w2e[n][k] = t - 100; end
      for (int bb = 0; bb < 2; bb++) begin t = $urandom_range(2); w2s[n][bb] = -8 + t; end
    end
    for (int q = 0; q < 2; q++)
      for (int ch = 0; ch < D; ch++) begin
        t = $urandom_range(8000);
        kv[q][ch] = bf2r(r2bf((real'(t) - 4000.0) / 1000.0 + real'(ch)));
      end

    repeat (3) @(posedge clk);
    rst_n = 1;
    // HBM contents (after the model's own initialisation)
    for (int b = 0; b < NSEQ; b++)
      for (int p = 0; p < L; p++)
        for (int v = 0; v < V; v++)
          hv_put_lane(HV_LOGIT + ((b * L + p) * 2 + v / VLEN) * VBEATS, v % VLEN, r2bf(logit[b][p][v]));
    for (int i = 0; i < BLEN; i++)
      for (int k = 0; k < VLEN; k++)
        hv_put_lane(HV_X + i * VBEATS, k, (k < MLEN) ? r2bf(xm[i][k]) : 16'h0000);
    for (int q = 0; q < 2; q++)
      for (int k = 0; k < VLEN; k++)
        hv_put_lane(HV_KV + q * VBEATS, k, (k < D) ? r2bf(kv[q][k]) : 16'h0000);
    for (int rr = 0; rr < MLEN + BLEN; rr++) begin
      logic [MBEATS*BEAT_W-1:0] mrow;
      mrow = '0;
      for (int k = 0; k < MLEN; k++)
        mrow[k*8 +: 8] = (rr < MLEN) ? 8'(w1e[rr][k]) : 8'(w2e[rr-MLEN][k]);
      for (int bb = 0; bb < 2; bb++)
        mrow[MLEN*8 + bb*8 +: 8] = (rr < MLEN) ? 8'(w1s[rr][bb]) : 8'(w2s[rr-MLEN][bb]);
      for (int bt = 0; bt < MBEATS; bt++) u_hm.mem[rr * MBEATS + bt] = mrow[bt*BEAT_W +: BEAT_W];
    end

    // ---------- part 1: sampling ----------
    li(10, 0); li(11, 1); li(12, 2); li(13, 0); li(14, VLEN); li(17, MASK_ID); li(18, K);
    li(19, L); li(23, 0);
    for (int b = 0; b < NSEQ; b++)
      for (int p = 0; p < L; p++) begin
        li(22, x_init[b][p]);
        prog.push_back(mk(OP_S_ST_INT, 22, 23, 0, b * L + p));
      end
    for (int b = 0; b < NSEQ; b++) begin
      for (int p = 0; p < L; p++) begin
        li(3, HV_LOGIT + (b * L + p) * 2 * VBEATS);
        li(5, p);
        prog.push_back(mk(OP_H_PREFETCH_V, 0, 10, 3, 0));
        prog.push_back(mk(OP_H_PREFETCH_V, 0, 11, 3, VBEATS));
        prog.push_back(mk(OP_V_RED_MAX_IDX, 1, 10, 13, 0));
        prog.push_back(mk(OP_V_RED_MAX_IDX, 1, 11, 14, 1));
        prog.push_back(mk(OP_V_EXP_V, 10, 10, 1, 0));
        prog.push_back(mk(OP_V_EXP_V, 11, 11, 1, 0));
        prog.push_back(mk(OP_V_RED_SUM, 2, 10, 0, 0));
        prog.push_back(mk(OP_V_RED_SUM, 2, 11, 0, 1));
        prog.push_back(mk(OP_S_RECIP, 3, 2, 0, 0));
        prog.push_back(mk(OP_S_ST_FP, 3, 5, 0, 0));
        prog.push_back(mk(OP_S_ST_INT, 1, 5, 0, 64 + b * L));
      end
      li(15, b * L); li(16, 32 + b * L); li(20, 96 + b * L); li(21, 64 + b * L);
      prog.push_back(mk(OP_S_MAP_V_FP, 12, 0, 0, L));
      prog.push_back(mk(OP_V_EQ_INT, 16, 15, 17, L));
      prog.push_back(mk(OP_V_TOPK_MASK, 18, 12, 16, (L << 16) | (96 + b * L)));
      prog.push_back(mk(OP_V_SELECT_INT, 15, 20, 19, ((b * L) << 16) | (64 + b * L)));
      prog.push_back(mk(OP_S_OUT_TOK, 0, 15, 0, L));
      prog.push_back(mk(OP_S_OUT_TOK, 0, 21, 0, L));
    end

    // ---------- part 2: GEMM and vector ops ----------
    li(24, 4); li(25, 0); li(26, MLEN); li(27, 8); li(3, HV_X);
    for (int i = 0; i < BLEN; i++) begin
      li(28, 4 + i);
      prog.push_back(mk(OP_H_PREFETCH_V, 0, 28, 3, i * VBEATS));
    end
    li(3, 0);
    for (int rr = 0; rr < MLEN + BLEN; rr++) begin
      li(28, rr);
      prog.push_back(mk(OP_H_PREFETCH_M, 0, 28, 3, rr * MBEATS));
    end
    prog.push_back(mk(OP_M_MM, 0, 24, 25, (1 << 16) | 4));
    prog.push_back(mk(OP_M_TMM, 0, 24, 26, 0));
    prog.push_back(mk(OP_M_SUM, 27, 0, 0, 4));
    li(28, 5); li(29, 16); li(30, 17);
    prog.push_back(mk(OP_S_LI_FP, 4, 0, 0, 16'h4000));
    prog.push_back(mk(OP_V_ADD_VV, 29, 24, 28, 0));
    prog.push_back(mk(OP_V_MUL_VF, 30, 24, 4, 0));
    li(3, HV_OUT);
    for (int i = 0; i < BLEN; i++) begin
      li(28, 8 + i);
      prog.push_back(mk(OP_H_STORE_V, 0, 28, 3, i * VBEATS));
    end
    prog.push_back(mk(OP_H_STORE_V, 0, 29, 3, 4 * VBEATS));
    prog.push_back(mk(OP_H_STORE_V, 0, 30, 3, 5 * VBEATS));

    // ---------- part 3: BAOS ----------
    li(3, HV_KV); li(28, 12); li(29, 13); li(30, 14); li(31, 15); li(27, 20);
    prog.push_back(mk(OP_H_PREFETCH_V, 0, 28, 3, 0));
    prog.push_back(mk(OP_H_PREFETCH_V, 0, 29, 3, VBEATS));
    prog.push_back(mk(OP_B_CALIB, 0, 28, 0, (256 << 17) | (1 << 16) | 2));
    prog.push_back(mk(OP_B_NORM_K, 27, 28, 0, 0));
    prog.push_back(mk(OP_B_SCALE_Q, 30, 29, 0, 0));
    prog.push_back(mk(OP_M_DEQ_V, 31, 27, 0, 0));
    li(3, HV_OUT);
    prog.push_back(mk(OP_H_STORE_V, 0, 30, 3, 6 * VBEATS));
    prog.push_back(mk(OP_H_STORE_V, 0, 31, 3, 7 * VBEATS));

    // ---------- run ----------
    foreach (prog[i]) begin
      @(negedge clk);
      instr_valid = 1;
      instr = prog[i];
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
    end
    @(negedge clk);
    instr_valid = 0;
    while (tokens.size() < 2 * NSEQ * L) @(posedge clk);
    repeat (5) @(posedge clk);
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);

    // ---------- check part 1 ----------
    for (int b = 0; b < NSEQ; b++) begin
      for (int p = 0; p < L; p++) cand[p] = (x_init[b][p] == MASK_ID);
      order.delete();
      for (int p = 0; p < L; p++) if (cand[p]) order.push_back(p);
      for (int p = 0; p < L; p++) sel[p] = 0;
      for (int n = 0; n < K && n < order.size(); n++) begin
        a = -1;
        foreach (order[q]) if (!sel[order[q]] && (a < 0 || conf[b][order[q]] > conf[b][a])) a = order[q];
        sel[a] = 1;
      end
      for (int p = 0; p < L; p++) begin
        want = sel[p] ? peak[b][p] : x_init[b][p];
        check(tokens[b * 2 * L + p] == int'(want),
              $sformatf("seq %0d pos %0d token %0d want %0d", b, p, tokens[b * 2 * L + p], int'(want)));
        check(tokens[b * 2 * L + L + p] == peak[b][p],
              $sformatf("seq %0d pos %0d argmax %0d want %0d", b, p, tokens[b * 2 * L + L + p], peak[b][p]));
      end
    end

    // ---------- check part 2 ----------
    for (int i = 0; i < BLEN; i++)
      for (int n = 0; n < BLEN; n++) begin
        y = 0.0; mag = 0.0;
        for (int k = 0; k < MLEN; k++) begin
          y   += xm[i][k] * real'(w1e[k][4 + n]) * (2.0 ** w1s[k][0]);
          mag += ((xm[i][k] < 0) ? -xm[i][k] : xm[i][k]) * 128.0 * (2.0 ** w1s[k][0]);
          y   += xm[i][k] * real'(w2e[n][k]) * (2.0 ** w2s[n][k / BLK]);
          mag += ((xm[i][k] < 0) ? -xm[i][k] : xm[i][k]) * 128.0 * (2.0 ** w2s[n][k / BLK]);
        end
        got = bf2r(hv_get_lane(HV_OUT + i * VBEATS, 4 + n));
        check(close(got, y, 0.02, 0.01 * mag + 0.01),
              $sformatf("Y[%0d][%0d] got %f want %f", i, n, got, y));
      end
    for (int k = 0; k < MLEN; k++) begin
      got = bf2r(hv_get_lane(HV_OUT + 4 * VBEATS, k));
      check(close(got, xm[0][k] + xm[1][k], 0.01, 0.01), $sformatf("add lane %0d got %f", k, got));
      got = bf2r(hv_get_lane(HV_OUT + 5 * VBEATS, k));
      check(close(got, 2.0 * xm[0][k], 0.01, 0.001), $sformatf("mulvf lane %0d got %f", k, got));
    end

    // ---------- check part 3 ----------
    for (int ch = 0; ch < D; ch++) begin
      mn = (kv[0][ch] < kv[1][ch]) ? kv[0][ch] : kv[1][ch];
      mx = (kv[0][ch] < kv[1][ch]) ? kv[1][ch] : kv[0][ch];
      // centre and factor are formed in BF16 by the unit: round like it does
      c  = bf2r(r2bf(mn + mx)) / 2.0;
      f  = bf2r(r2bf(mx - c));
      if (bf2r(r2bf(c - mn)) > f) f = bf2r(r2bf(c - mn));
      if (f == 0.0) f = 1.0;
      got = bf2r(hv_get_lane(HV_OUT + 6 * VBEATS, ch));
      check(close(got, kv[1][ch] * f, 0.03, 0.01), $sformatf("qscale ch %0d got %f want %f", ch, got, kv[1][ch] * f));
      got = bf2r(hv_get_lane(HV_OUT + 7 * VBEATS, ch));
      check(close(got, (kv[0][ch] - c) / f, 0.03, 0.03),
            $sformatf("norm+MX+deq ch %0d got %f want %f", ch, got, (kv[0][ch] - c) / f));
    end
    for (int k = D; k < MLEN; k++)
      check(hv_get_lane(HV_OUT + 7 * VBEATS, k) == 16'h0000, $sformatf("norm pad lane %0d", k));

    // ---------- mechanisms ----------
    check(n_dep_stall   > 0, "no stall on dependency");
    check(n_pf_overlap  > 0, "no issue overlapping a prefetch");
    check(n_chunk_chain > 0, "no reduction chained over chunks");
    check(n_exp   > 0, "no V_EXP_V");
    check(n_recip > 0, "no S_RECIP");
    check(n_topk  > 0, "no V_TOPK_MASK");
    check(n_select > 0, "no V_SELECT_INT");
    check(n_eq    > 0, "no V_EQ_INT");
    check(n_map   > 0, "no S_MAP_V_FP");
    check(n_mm_rows  > 0, "no non-transposed weight load");
    check(n_tmm_rows > 0, "no transposed weight load");
    check(n_sum_rows > 0, "no adder-tree output");
    check(n_tok_bp   > 0, "no token back-pressure");
    check(n_hbm_stall > 0, "no HBM stall");
    check(n_host_stall > 0, "no full instruction queue");
    check(n_store > 0, "no HBM store");
    check(n_calib > 0, "no BAOS calibration");
    check(n_norm  > 0, "no BAOS key normalisation");
    check(n_qscale > 0, "no BAOS query scaling");
    check(n_deq   > 0, "no dequantization");
    $display("mechanisms: dep_stall=%0d pf_overlap=%0d chunk_chain=%0d exp=%0d recip=%0d topk=%0d select=%0d eq=%0d map=%0d",
             n_dep_stall, n_pf_overlap, n_chunk_chain, n_exp, n_recip, n_topk, n_select, n_eq, n_map);
    $display("mechanisms: mm_rows=%0d tmm_rows=%0d sum_rows=%0d tok_bp=%0d hbm_stall=%0d host_stall=%0d store_beats=%0d",
             n_mm_rows, n_tmm_rows, n_sum_rows, n_tok_bp, n_hbm_stall, n_host_stall, n_store);
    $display("mechanisms: calib=%0d norm=%0d qscale=%0d deq=%0d", n_calib, n_norm, n_qscale, n_deq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host side of the token port, with random back-pressure
  always @(negedge clk) tok_ready = ($urandom_range(3) == 0);
  always @(posedge clk) if (rst_n && tok_valid && tok_ready) tokens.push_back(int'(tok_data));
endmodule
