// dart_top: the DART NPU for diffusion language model inference.
//
// One chip runs both stages of a diffusion-LLM step: the GEMM-heavy
// transformer forward pass and the sampling stage that turns the logits of a
// generation block into committed tokens. The blocks and their connections
// follow the architecture figure of the paper:
//   - decoder (instruction queue, in-order issue, stall on dependency),
//   - Matrix Machine: Buf(X) with the input quantizer, Buf(W), MLEN/BLEN
//     systolic sub-arrays of BLEN x BLEN MX PEs, adder tree and Buf(Y),
//   - Vector Machine: elementwise unit with scalar broadcast, reduction unit
//     (max with index, sum, both chained over vocabulary chunks), a vector
//     buffer for the second operand, streaming top-k mask unit and the BAOS
//     unit (KV smoothing) with the quantizer towards the Matrix SRAM,
//   - Scalar Machine: Int and FP units with the gp/fp register files,
//   - memories: Vector SRAM (BF16), Matrix SRAM (MX), FP SRAM, Int SRAM, the
//     output token FIFO towards the host, and the MX dequantizer from the
//     Matrix SRAM back to the Vector SRAM,
//   - one prefetch engine per SRAM path towards HBM (two independent paths).
// The host and the HBM stacks are outside: the instruction port, the two HBM
// ports and the token port are the chip's pins.
//
// A sequencer executes each issued multi-cycle instruction (encodings in
// dart_pkg); scalar register instructions, S_ST_FP and S_ST_INT finish in
// their issue cycle. Prefetches run in the background: the decoder only holds
// an instruction that touches an SRAM whose engine is still busy.
// Timings of the operations (cycles from issue to the last write):
//   H_PREFETCH_*   1 to hand over, then background transfer
//   M_MM / M_TMM   BLEN+1 (load Buf(X)) + MLEN+1 or BLEN+1 (load Buf(W))
//                  + 1 + BLEN (streaming)
//   M_SUM          systolic drain (2*BLEN-1 after streaming) + 1 + BLEN rows
//   V_*_VV         4 or 5;  V_RED_*  log2(VLEN)+3;  V_TOPK_MASK  L+5
//   V_SELECT_INT / V_EQ_INT / S_OUT_TOK  n+2 (S_OUT_TOK also waits for FIFO room)
// Widths of the pins: HBM beats are BEAT_W bits; an SRAM row moves in
// ceil(row bits / BEAT_W) beats, least significant beat first; a Vector SRAM
// row is VLEN BF16 lanes (lane i at bits 16i), a Matrix SRAM row is MLEN MX
// elements (element i at bits 8i) followed by the MLEN/32 block scales.
// Sizes follow the paper (BLEN 64, MLEN 512, VLEN 2048, D 128, FP SRAM =
// max(L, VLEN), Int SRAM = 2BL). Own choices: the encoding, Vector SRAM depth
// (two BLEN-row activation tiles, which also covers the sampling footprint of
// 3BL + V_chunk elements), Matrix SRAM depth (two MLEN-row weight tiles), the
// lane conventions of S_MAP_V_FP, V_TOPK_MASK and the BAOS operations (lanes
// 0 upwards) and the sequencing itself.
module dart_top
  import dart_pkg::*;
#(
  parameter int unsigned BLEN        = BLEN_D,
  parameter int unsigned MLEN        = MLEN_D,
  parameter int unsigned VLEN        = VLEN_D,
  parameter int unsigned D           = HEAD_DIM_D,
  parameter int unsigned BLK         = MX_BLOCK_D,
  parameter int unsigned VS_DEPTH    = 2 * BLEN_D,
  parameter int unsigned MS_DEPTH    = 2 * MLEN_D,
  parameter int unsigned FP_ENTRIES  = VLEN_D,
  parameter int unsigned INT_ENTRIES = 2 * B_D * L_D,
  parameter int unsigned LMAX        = SAMP_LMAX,
  parameter int unsigned KMAX        = SAMP_KMAX,
  parameter int unsigned BEAT_W      = 512,
  parameter int unsigned HAW         = 32,
  parameter int unsigned OUT_DEPTH   = 64,
  localparam int unsigned NB         = MLEN / BLK,
  localparam int unsigned VROW_W     = VLEN * 16,
  localparam int unsigned MROW_W     = MLEN * 8 + NB * 8,
  localparam int unsigned AWV        = $clog2(VS_DEPTH),
  localparam int unsigned AWM        = $clog2(MS_DEPTH),
  localparam int unsigned AWF        = $clog2(FP_ENTRIES),
  localparam int unsigned AWI        = $clog2(INT_ENTRIES),
  localparam int unsigned SLOTS      = MLEN / D,
  localparam int unsigned SW         = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host instruction port
  input  logic              instr_valid,
  output logic              instr_ready,
  input  instr_t            instr,
  // HBM path of the Vector SRAM (read and write)
  output logic              hv_rd_req_valid,
  input  logic              hv_rd_req_ready,
  output logic [HAW-1:0]    hv_rd_req_addr,
  input  logic              hv_rd_resp_valid,
  input  logic [BEAT_W-1:0] hv_rd_resp_data,
  output logic              hv_wr_valid,
  input  logic              hv_wr_ready,
  output logic [HAW-1:0]    hv_wr_addr,
  output logic [BEAT_W-1:0] hv_wr_data,
  // HBM path of the Matrix SRAM (read)
  output logic              hm_rd_req_valid,
  input  logic              hm_rd_req_ready,
  output logic [HAW-1:0]    hm_rd_req_addr,
  input  logic              hm_rd_resp_valid,
  input  logic [BEAT_W-1:0] hm_rd_resp_data,
  // output tokens to the host
  output logic              tok_valid,
  input  logic              tok_ready,
  output logic [31:0]       tok_data,
  output logic              busy
);
  localparam logic [1:0] IV_SEL = 2'd0, IV_EQ = 2'd1, IV_WRMASK = 2'd2, IV_OUT = 2'd3;

  typedef enum logic [5:0] {
    ST_IDLE, ST_PF_V, ST_PF_M, ST_SV_RD, ST_SV_CMD,
    ST_MM_X, ST_MM_W, ST_MM_GO, ST_MM_RUN, ST_MSUM_REQ, ST_MSUM_OUT,
    ST_VA, ST_VB, ST_VEW_GO, ST_VEW_WAIT,
    ST_VRED_RD, ST_VRED_GO, ST_VRED_WAIT,
    ST_TK_RD, ST_TK_LATCH, ST_TK_START, ST_TK_WAIT, ST_TK_WR,
    ST_IS_START, ST_IS_WAIT, ST_LD, ST_MAP,
    ST_DQ_RD, ST_DQ_GO, ST_DQ_WAIT,
    ST_BC_CLR, ST_BC_ROW, ST_BC_FIN,
    ST_BN_RD, ST_BN_GO, ST_BN_WAIT, ST_BN_WR,
    ST_BS_RD, ST_BS_GO, ST_BS_WAIT
  } state_e;

  state_e      state;
  instr_t      ins;
  logic [31:0] g_rd, g_rs1, g_rs2;
  bf16_t       f_rs2;
  logic [31:0] cnt;

  // ---------------- decoder ----------------
  logic   head_valid, issue, is_single, dep_stall, exec_busy;
  instr_t head;
  logic   v_pf_busy, m_pf_busy;

  assign exec_busy = (state != ST_IDLE);

  dart_decoder u_dec (
    .clk, .rst_n,
    .in_valid(instr_valid), .in_ready(instr_ready), .in_instr(instr),
    .exec_busy, .v_pf_busy, .m_pf_busy,
    .head_valid, .head, .issue, .is_single, .dep_stall);

  // ---------------- scalar machine ----------------
  logic        sm_exec;
  logic        gp_wr_en, fp_wr_en;
  logic [4:0]  gp_wr_addr, fp_wr_addr;
  logic [31:0] gp_wr_data;
  bf16_t       fp_wr_data;
  logic [4:0]  gp_ra [3];
  logic [31:0] gp_rd [3];
  logic [4:0]  fp_ra [2];
  bf16_t       fp_rd [2];

  always_comb begin
    gp_ra[0] = head.rd;
    gp_ra[1] = head.rs1;
    gp_ra[2] = head.rs2;
    fp_ra[0] = head.rd;
    fp_ra[1] = head.rs2;
    sm_exec  = issue && (head.op inside {OP_S_LI_INT, OP_S_ADDI_INT, OP_S_ADD_INT,
                OP_S_SUB_INT, OP_S_MUL_INT, OP_S_DIV_INT, OP_S_LI_FP, OP_S_ADD_FP,
                OP_S_SUB_FP, OP_S_MUL_FP, OP_S_DIV_FP, OP_S_EXP_FP, OP_S_RECIP, OP_S_SQRT});
  end

  dart_scalar_machine u_sm (
    .clk, .rst_n, .exec(sm_exec), .instr(head),
    .gp_wr_en, .gp_wr_addr, .gp_wr_data, .fp_wr_en, .fp_wr_addr, .fp_wr_data,
    .gp_ra, .gp_rd, .fp_ra, .fp_rd);

  // ---------------- memories ----------------
  logic            vs_rd_en, vs_wr_en, seq_vs_wr;
  logic [AWV-1:0]  vs_rd_addr, vs_wr_addr, seq_vs_addr;
  logic [VLEN-1:0] vs_wr_mask, seq_vs_mask;
  bf16_t           vs_rd_data [VLEN];
  bf16_t           vs_wr_data [VLEN];
  bf16_t           seq_vs_data[VLEN];

  dart_vector_sram #(.VLEN(VLEN), .DEPTH(VS_DEPTH)) u_vsram (
    .clk, .rd_en(vs_rd_en), .rd_addr(vs_rd_addr), .rd_data(vs_rd_data),
    .wr_en(vs_wr_en), .wr_addr(vs_wr_addr), .wr_mask(vs_wr_mask), .wr_data(vs_wr_data));

  logic                   ms_rd_en, ms_wr_en, seq_ms_wr;
  logic [AWM-1:0]         ms_rd_addr, ms_wr_addr;
  logic signed [7:0]      ms_rd_elem  [MLEN];
  mxscale_t               ms_rd_escale[MLEN];
  logic signed [7:0]      ms_wr_elem  [MLEN];
  mxscale_t               ms_wr_scale [NB];

  dart_matrix_sram #(.MLEN(MLEN), .BLK(BLK), .ELEM_W(8), .DEPTH(MS_DEPTH)) u_msram (
    .clk, .rd_en(ms_rd_en), .rd_addr(ms_rd_addr), .rd_elem(ms_rd_elem), .rd_escale(ms_rd_escale),
    .wr_en(ms_wr_en), .wr_addr(ms_wr_addr), .wr_elem(ms_wr_elem), .wr_scale(ms_wr_scale));

  logic           fs_wr_en, fs_rd_en;
  logic [AWF-1:0] fs_wr_addr, fs_rd_addr;
  bf16_t          fs_wr_data, fs_rd_data;
  bf16_t          fs_vec [FP_ENTRIES];

  dart_fp_sram #(.ENTRIES(FP_ENTRIES)) u_fsram (
    .clk, .rst_n, .wr_en(fs_wr_en), .wr_addr(fs_wr_addr), .wr_data(fs_wr_data),
    .rd_en(fs_rd_en), .rd_addr(fs_rd_addr), .rd_data(fs_rd_data), .vec_out(fs_vec));

  logic            is_wr_en, is_rd_en, is_start, is_busy, is_done;
  logic [AWI-1:0]  is_wr_addr, is_rd_addr, is_dst, is_m, is_a, is_b, is_cand_base;
  logic [31:0]     is_wr_data, is_rd_data, is_cmp;
  logic [1:0]      is_op;
  logic [AWI:0]    is_len;
  logic [LMAX-1:0] is_wmask, is_cand;
  logic            is_out_valid, is_out_ready;
  logic [31:0]     is_out_data;

  dart_int_sram #(.ENTRIES(INT_ENTRIES), .LMAX(LMAX)) u_isram (
    .clk, .rst_n,
    .wr_en(is_wr_en), .wr_addr(is_wr_addr), .wr_data(is_wr_data),
    .rd_en(is_rd_en), .rd_addr(is_rd_addr), .rd_data(is_rd_data),
    .start(is_start), .op(is_op), .dst_base(is_dst), .m_base(is_m), .a_base(is_a),
    .b_base(is_b), .len(is_len), .cmp_val(is_cmp), .wmask(is_wmask),
    .busy(is_busy), .done(is_done),
    .out_valid(is_out_valid), .out_data(is_out_data), .out_ready(is_out_ready),
    .cand_base(is_cand_base), .cand(is_cand));

  dart_out_fifo #(.W(32), .DEPTH(OUT_DEPTH)) u_tok_fifo (
    .clk, .rst_n,
    .in_valid(is_out_valid), .in_ready(is_out_ready), .in_data(is_out_data),
    .out_valid(tok_valid), .out_ready(tok_ready), .out_data(tok_data), .count());

  // ---------------- prefetch engines ----------------
  logic                vpf_cmd_valid, vpf_cmd_ready, vpf_cmd_store;
  logic [HAW-1:0]      vpf_cmd_addr;
  logic [VROW_W-1:0]   vpf_cmd_data, vpf_row_data;
  logic                vpf_row_valid;
  logic [AWV-1:0]      vpf_row_addr;

  dart_prefetch #(.ROW_W(VROW_W), .BEAT_W(BEAT_W), .HAW(HAW), .SAW(AWV)) u_vpf (
    .clk, .rst_n,
    .cmd_valid(vpf_cmd_valid), .cmd_ready(vpf_cmd_ready), .cmd_store(vpf_cmd_store),
    .cmd_hbm_addr(vpf_cmd_addr), .cmd_row(AWV'(g_rs1)), .cmd_data(vpf_cmd_data),
    .rd_req_valid(hv_rd_req_valid), .rd_req_ready(hv_rd_req_ready), .rd_req_addr(hv_rd_req_addr),
    .rd_resp_valid(hv_rd_resp_valid), .rd_resp_data(hv_rd_resp_data),
    .wr_valid(hv_wr_valid), .wr_ready(hv_wr_ready), .wr_addr(hv_wr_addr), .wr_data(hv_wr_data),
    .row_valid(vpf_row_valid), .row_ready(!seq_vs_wr), .row_addr(vpf_row_addr),
    .row_data(vpf_row_data), .busy(v_pf_busy));

  logic                mpf_cmd_valid, mpf_cmd_ready;
  logic [MROW_W-1:0]   mpf_row_data;
  logic                mpf_row_valid;
  logic [AWM-1:0]      mpf_row_addr;
  logic                hm_wr_valid_unused;
  logic [HAW-1:0]      hm_wr_addr_unused;
  logic [BEAT_W-1:0]   hm_wr_data_unused;

  dart_prefetch #(.ROW_W(MROW_W), .BEAT_W(BEAT_W), .HAW(HAW), .SAW(AWM)) u_mpf (
    .clk, .rst_n,
    .cmd_valid(mpf_cmd_valid), .cmd_ready(mpf_cmd_ready), .cmd_store(1'b0),
    .cmd_hbm_addr(vpf_cmd_addr), .cmd_row(AWM'(g_rs1)), .cmd_data('0),
    .rd_req_valid(hm_rd_req_valid), .rd_req_ready(hm_rd_req_ready), .rd_req_addr(hm_rd_req_addr),
    .rd_resp_valid(hm_rd_resp_valid), .rd_resp_data(hm_rd_resp_data),
    .wr_valid(hm_wr_valid_unused), .wr_ready(1'b0), .wr_addr(hm_wr_addr_unused),
    .wr_data(hm_wr_data_unused),
    .row_valid(mpf_row_valid), .row_ready(!seq_ms_wr), .row_addr(mpf_row_addr),
    .row_data(mpf_row_data), .busy(m_pf_busy));

  assign vpf_cmd_addr = HAW'(g_rs2 + ins.imm[31:0]);
  always_comb
    for (int l = 0; l < int'(VLEN); l++) vpf_cmd_data[l*16 +: 16] = vs_rd_data[l];

  // ---------------- matrix machine ----------------
  logic                   mm_x_valid, mm_w_valid, mm_clear, mm_go, mm_sum, mm_busy;
  logic [$clog2(BLEN)-1:0] mm_x_idx, mm_y_idx;
  logic [$clog2(MLEN)-1:0] mm_w_idx;
  bf16_t                  mm_x_row [MLEN];
  logic                   mm_y_valid;
  bf16_t                  mm_y_row [BLEN];

  always_comb
    for (int k = 0; k < int'(MLEN); k++) mm_x_row[k] = vs_rd_data[k];

  dart_matrix_machine #(.BLEN(BLEN), .MLEN(MLEN), .BLK(BLK), .ELEM_W(8), .ACC_FRAC(16)) u_mm (
    .clk, .rst_n,
    .x_valid(mm_x_valid), .x_idx(mm_x_idx), .x_row(mm_x_row),
    .w_valid(mm_w_valid), .w_trans(ins.op == OP_M_TMM), .w_idx(mm_w_idx),
    .col_base(($clog2(MLEN))'(ins.imm[15:0])), .w_elem(ms_rd_elem), .w_escale(ms_rd_escale),
    .clear(mm_clear), .go(mm_go), .sum_req(mm_sum), .busy(mm_busy),
    .y_valid(mm_y_valid), .y_idx(mm_y_idx), .y_row(mm_y_row));

  // ---------------- vector machine ----------------
  bf16_t      vbuf [VLEN];            // Vector buf: first operand of V_*_VV
  logic       ew_in_valid, ew_out_valid;
  logic [2:0] ew_op;
  bf16_t      ew_a [VLEN];
  bf16_t      ew_y [VLEN];

  always_comb
    for (int l = 0; l < int'(VLEN); l++)
      ew_a[l] = (ins.op inside {OP_V_ADD_VV, OP_V_SUB_VV, OP_V_MUL_VV}) ? vbuf[l] : vs_rd_data[l];

  always_comb
    unique case (ins.op)
      OP_V_ADD_VV: ew_op = 3'd0;
      OP_V_SUB_VV: ew_op = 3'd1;
      OP_V_MUL_VV: ew_op = 3'd2;
      OP_V_MUL_VF: ew_op = 3'd3;
      default:     ew_op = 3'd4;   // V_EXP_V
    endcase

  dart_elementwise_unit #(.VLEN(VLEN)) u_ew (
    .clk, .rst_n, .in_valid(ew_in_valid), .op(ew_op), .a(ew_a), .b(vs_rd_data), .s(f_rs2),
    .out_valid(ew_out_valid), .y(ew_y));

  logic        red_in_valid, red_out_valid;
  bf16_t       red_val;
  logic [31:0] red_idx;

  dart_reduction_unit #(.VLEN(VLEN), .IDX_W(32)) u_red (
    .clk, .rst_n, .in_valid(red_in_valid), .op_sum(ins.op == OP_V_RED_SUM),
    .acc_en(ins.imm[0]), .base_idx(g_rs2), .in_vec(vs_rd_data),
    .out_valid(red_out_valid), .out_val(red_val), .out_idx(red_idx));

  bf16_t           tk_conf [LMAX];
  logic            tk_start, tk_busy, tk_done;
  logic [LMAX-1:0] tk_mask, tk_mask_q;

  dart_topk_mask #(.LMAX(LMAX), .KMAX(KMAX)) u_topk (
    .clk, .rst_n, .start(tk_start), .len(($clog2(LMAX)+1)'(ins.imm[31:16])),
    .k(($clog2(KMAX)+1)'(g_rd)), .conf(tk_conf), .cand(is_cand),
    .busy(tk_busy), .done(tk_done), .mask(tk_mask));

  logic  bz_clear, bz_calib, bz_fin, bz_in_valid, bz_out_valid;
  bf16_t bz_in  [D];
  bf16_t bz_out [D];
  bf16_t bz_center [D];
  bf16_t bz_factor [D];

  always_comb
    for (int c = 0; c < int'(D); c++) bz_in[c] = vs_rd_data[c];

  dart_baos #(.D(D), .SLOTS(SLOTS)) u_baos (
    .clk, .rst_n, .slot(SW'(ins.rs2)), .calib_clear(bz_clear), .calib_valid(bz_calib),
    .finalize(bz_fin), .mode_minmax(ins.imm[16]), .alpha(ins.imm[25:17]),
    .in_valid(bz_in_valid), .op_qscale(ins.op == OP_B_SCALE_Q), .in_vec(bz_in),
    .out_valid(bz_out_valid), .out_vec(bz_out), .center(bz_center), .factor(bz_factor));

  // quantizer from the Vector Machine into the Matrix SRAM (smoothed keys)
  logic              kq_in_valid, kq_out_valid;
  bf16_t             kq_in [MLEN];
  logic signed [7:0] kq_elem [MLEN];
  mxscale_t          kq_scale[NB];

  always_comb
    for (int k = 0; k < int'(MLEN); k++) kq_in[k] = (k < int'(D)) ? bz_out[k % D] : BF16_ZERO;

  dart_mx_quantizer #(.N(MLEN), .BLK(BLK), .ELEM_W(8)) u_kq (
    .clk, .rst_n, .in_valid(kq_in_valid), .in_data(kq_in),
    .out_valid(kq_out_valid), .out_elem(kq_elem), .out_scale(kq_scale));

  // dequantizer from the Matrix SRAM into the Vector SRAM
  logic     dq_in_valid, dq_out_valid;
  mxscale_t dq_scale [NB];
  bf16_t    dq_data  [MLEN];

  always_comb
    for (int b = 0; b < int'(NB); b++) dq_scale[b] = ms_rd_escale[b*BLK];

  dart_mx_dequantizer #(.N(MLEN), .BLK(BLK), .ELEM_W(8)) u_dq (
    .clk, .rst_n, .in_valid(dq_in_valid), .in_elem(ms_rd_elem), .in_scale(dq_scale),
    .out_valid(dq_out_valid), .out_data(dq_data));

  // ---------------- SRAM write muxes ----------------
  always_comb begin
    vs_wr_en   = seq_vs_wr || vpf_row_valid;
    vs_wr_addr = seq_vs_wr ? seq_vs_addr : vpf_row_addr;
    for (int l = 0; l < int'(VLEN); l++) begin
      vs_wr_mask[l] = seq_vs_wr ? seq_vs_mask[l] : 1'b1;
      vs_wr_data[l] = seq_vs_wr ? seq_vs_data[l] : bf16_t'(vpf_row_data[l*16 +: 16]);
    end
  end

  always_comb begin
    ms_wr_en   = seq_ms_wr || mpf_row_valid;
    ms_wr_addr = seq_ms_wr ? AWM'(g_rd) : mpf_row_addr;
    for (int k = 0; k < int'(MLEN); k++)
      ms_wr_elem[k] = seq_ms_wr ? kq_elem[k] : mpf_row_data[k*8 +: 8];
    for (int b = 0; b < int'(NB); b++)
      ms_wr_scale[b] = seq_ms_wr ? kq_scale[b] : mpf_row_data[MLEN*8 + b*8 +: 8];
  end

  // ---------------- sequencer ----------------
  logic [31:0] n_rows;
  assign n_rows = (ins.op == OP_M_TMM) ? 32'(BLEN) : 32'(MLEN);

  always_comb begin
    vs_rd_en = 1'b0;  vs_rd_addr = '0;
    seq_vs_wr = 1'b0; seq_vs_addr = AWV'(g_rd);
    seq_vs_mask = '0;
    for (int l = 0; l < int'(VLEN); l++) seq_vs_data[l] = BF16_ZERO;
    ms_rd_en = 1'b0;  ms_rd_addr = '0;  seq_ms_wr = 1'b0;
    fs_wr_en = 1'b0;  fs_wr_addr = AWF'(gp_rd[1] + head.imm[31:0]);  fs_wr_data = fp_rd[0];
    fs_rd_en = 1'b0;  fs_rd_addr = AWF'(gp_rd[1] + head.imm[31:0]);
    is_wr_en = 1'b0;  is_wr_addr = AWI'(gp_rd[1] + head.imm[31:0]);  is_wr_data = gp_rd[0];
    is_rd_en = 1'b0;  is_rd_addr = AWI'(gp_rd[1] + head.imm[31:0]);
    is_start = 1'b0;  is_op = IV_SEL;  is_dst = AWI'(g_rd);  is_m = AWI'(g_rs1);
    is_a = AWI'(ins.imm[15:0]);  is_b = AWI'(ins.imm[31:16]);  is_len = (AWI+1)'(g_rs2);
    is_cmp = g_rs2;  is_wmask = tk_mask_q;  is_cand_base = AWI'(g_rs2);
    gp_wr_en = 1'b0;  gp_wr_addr = ins.rd;  gp_wr_data = red_idx;
    fp_wr_en = 1'b0;  fp_wr_addr = ins.rd;  fp_wr_data = red_val;
    vpf_cmd_valid = 1'b0;  vpf_cmd_store = 1'b0;  mpf_cmd_valid = 1'b0;
    mm_x_valid = 1'b0;  mm_x_idx = ($clog2(BLEN))'(cnt - 1);
    mm_w_valid = 1'b0;  mm_w_idx = ($clog2(MLEN))'(cnt - 1);
    mm_clear = 1'b0;  mm_go = 1'b0;  mm_sum = 1'b0;
    ew_in_valid = 1'b0;  red_in_valid = 1'b0;  tk_start = 1'b0;
    bz_clear = 1'b0;  bz_calib = 1'b0;  bz_fin = 1'b0;  bz_in_valid = 1'b0;
    kq_in_valid = 1'b0;  dq_in_valid = 1'b0;

    // single-cycle instructions, in their issue cycle
    if (issue && head.op == OP_S_ST_FP)  fs_wr_en = 1'b1;
    if (issue && head.op == OP_S_ST_INT) is_wr_en = 1'b1;
    if (issue && head.op == OP_S_LD_FP)  fs_rd_en = 1'b1;
    if (issue && head.op == OP_S_LD_INT) is_rd_en = 1'b1;
    if (issue && head.op inside {OP_M_MM, OP_M_TMM} && head.imm[16]) mm_clear = 1'b1;

    unique case (state)
      ST_PF_V:   vpf_cmd_valid = 1'b1;
      ST_PF_M:   mpf_cmd_valid = 1'b1;
      ST_SV_RD:  begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs1); end
      ST_SV_CMD: begin vpf_cmd_valid = 1'b1; vpf_cmd_store = 1'b1; end
      ST_MM_X: begin
        if (cnt < 32'(BLEN)) begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs1 + cnt); end
        mm_x_valid = (cnt != 0);
      end
      ST_MM_W: begin
        if (cnt < n_rows) begin ms_rd_en = 1'b1; ms_rd_addr = AWM'(g_rs2 + cnt); end
        mm_w_valid = (cnt != 0);
      end
      ST_MM_GO:    mm_go = 1'b1;
      ST_MSUM_REQ: mm_sum = 1'b1;
      ST_MSUM_OUT: if (mm_y_valid) begin
        seq_vs_wr   = 1'b1;
        seq_vs_addr = AWV'(g_rd + 32'(mm_y_idx));
        for (int l = 0; l < int'(VLEN); l++) begin
          seq_vs_mask[l] = (l / int'(BLEN)) == (int'(ins.imm[15:0]) / int'(BLEN));
          seq_vs_data[l] = mm_y_row[l % BLEN];
        end
      end
      ST_VA:     begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs1); end
      ST_VB:     begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs2); end
      ST_VEW_GO: ew_in_valid = 1'b1;
      ST_VEW_WAIT: if (ew_out_valid) begin
        seq_vs_wr   = 1'b1;
        seq_vs_mask = '1;
        seq_vs_data = ew_y;
      end
      ST_VRED_RD: begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs1); end
      ST_VRED_GO: red_in_valid = 1'b1;
      ST_VRED_WAIT: if (red_out_valid) begin
        fp_wr_en = 1'b1;
        gp_wr_en = (ins.op == OP_V_RED_MAX_IDX);
      end
      ST_TK_RD:    begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs1); end
      ST_TK_START: tk_start = 1'b1;
      ST_TK_WR: begin
        is_start = 1'b1;  is_op = IV_WRMASK;  is_dst = AWI'(ins.imm[15:0]);
        is_len = (AWI+1)'(ins.imm[31:16]);
      end
      ST_IS_START: begin
        is_start = 1'b1;
        unique case (ins.op)
          OP_V_SELECT_INT: begin is_op = IV_SEL; end
          OP_V_EQ_INT: begin
            is_op = IV_EQ;  is_a = AWI'(g_rs1);  is_len = (AWI+1)'(ins.imm[31:0]);
          end
          default: begin   // S_OUT_TOK
            is_op = IV_OUT;  is_dst = AWI'(g_rs1);  is_len = (AWI+1)'(ins.imm[31:0]);
          end
        endcase
      end
      ST_LD: begin
        if (ins.op == OP_S_LD_FP) begin fp_wr_en = 1'b1; fp_wr_data = fs_rd_data; end
        else begin gp_wr_en = 1'b1; gp_wr_data = is_rd_data; end
      end
      ST_MAP: begin
        seq_vs_wr = 1'b1;
        for (int l = 0; l < int'(VLEN); l++)
          if (l < int'(FP_ENTRIES)) begin
            seq_vs_mask[l] = (32'(l) < ins.imm[31:0]);
            seq_vs_data[l] = fs_vec[l % FP_ENTRIES];
          end
      end
      ST_DQ_RD:  begin ms_rd_en = 1'b1; ms_rd_addr = AWM'(g_rs1); end
      ST_DQ_GO:  dq_in_valid = 1'b1;
      ST_DQ_WAIT: if (dq_out_valid) begin
        seq_vs_wr = 1'b1;
        for (int l = 0; l < int'(VLEN); l++)
          if (l < int'(MLEN)) begin
            seq_vs_mask[l] = 1'b1;
            seq_vs_data[l] = dq_data[l % MLEN];
          end
      end
      ST_BC_CLR: bz_clear = 1'b1;
      ST_BC_ROW: begin
        if (cnt < 32'(ins.imm[15:0])) begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs1 + cnt); end
        bz_calib = (cnt != 0);
      end
      ST_BC_FIN: bz_fin = 1'b1;
      ST_BN_RD, ST_BS_RD: begin vs_rd_en = 1'b1; vs_rd_addr = AWV'(g_rs1); end
      ST_BN_GO, ST_BS_GO: bz_in_valid = 1'b1;
      ST_BN_WAIT: kq_in_valid = bz_out_valid;
      ST_BN_WR:   seq_ms_wr = kq_out_valid;
      ST_BS_WAIT: if (bz_out_valid) begin
        seq_vs_wr = 1'b1;
        for (int l = 0; l < int'(VLEN); l++)
          if (l < int'(D)) begin
            seq_vs_mask[l] = 1'b1;
            seq_vs_data[l] = bz_out[l % D];
          end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      ins       <= '0;
      g_rd      <= '0;
      g_rs1     <= '0;
      g_rs2     <= '0;
      f_rs2     <= BF16_ZERO;
      cnt       <= '0;
      tk_mask_q <= '0;
      for (int l = 0; l < int'(VLEN); l++) vbuf[l] <= BF16_ZERO;
      for (int i = 0; i < int'(LMAX); i++) tk_conf[i] <= BF16_ZERO;
    end else begin
      unique case (state)
        ST_IDLE: if (issue) begin
          ins   <= head;
          g_rd  <= gp_rd[0];
          g_rs1 <= gp_rd[1];
          g_rs2 <= gp_rd[2];
          f_rs2 <= fp_rd[1];
          cnt   <= '0;
          unique case (head.op)
            OP_H_PREFETCH_V: state <= ST_PF_V;
            OP_H_PREFETCH_M: state <= ST_PF_M;
            OP_H_STORE_V:    state <= ST_SV_RD;
            OP_M_MM, OP_M_TMM: state <= ST_MM_X;
            OP_M_SUM:        state <= ST_MSUM_REQ;
            OP_V_ADD_VV, OP_V_SUB_VV, OP_V_MUL_VV, OP_V_MUL_VF, OP_V_EXP_V: state <= ST_VA;
            OP_V_RED_MAX_IDX, OP_V_RED_SUM: state <= ST_VRED_RD;
            OP_V_TOPK_MASK:  state <= ST_TK_RD;
            OP_V_SELECT_INT, OP_V_EQ_INT, OP_S_OUT_TOK: state <= ST_IS_START;
            OP_S_LD_FP, OP_S_LD_INT: state <= ST_LD;
            OP_S_MAP_V_FP:   state <= ST_MAP;
            OP_M_DEQ_V:      state <= ST_DQ_RD;
            OP_B_CALIB:      state <= ST_BC_CLR;
            OP_B_NORM_K:     state <= ST_BN_RD;
            OP_B_SCALE_Q:    state <= ST_BS_RD;
            default:         state <= ST_IDLE;
          endcase
        end
        ST_PF_V:   if (vpf_cmd_ready) state <= ST_IDLE;
        ST_PF_M:   if (mpf_cmd_ready) state <= ST_IDLE;
        ST_SV_RD:  state <= ST_SV_CMD;
        ST_SV_CMD: if (vpf_cmd_ready) state <= ST_IDLE;
        ST_MM_X: begin
          cnt <= cnt + 1;
          if (cnt == 32'(BLEN)) begin cnt <= '0; state <= ST_MM_W; end
        end
        ST_MM_W: begin
          cnt <= cnt + 1;
          if (cnt == n_rows) begin cnt <= '0; state <= ST_MM_GO; end
        end
        ST_MM_GO:    state <= ST_MM_RUN;
        ST_MM_RUN:   if (!mm_busy) state <= ST_IDLE;
        ST_MSUM_REQ: state <= ST_MSUM_OUT;
        ST_MSUM_OUT: if (mm_y_valid && mm_y_idx == ($clog2(BLEN))'(BLEN - 1)) state <= ST_IDLE;
        ST_VA: state <= (ins.op inside {OP_V_ADD_VV, OP_V_SUB_VV, OP_V_MUL_VV}) ? ST_VB : ST_VEW_GO;
        ST_VB: begin vbuf <= vs_rd_data; state <= ST_VEW_GO; end
        ST_VEW_GO:   state <= ST_VEW_WAIT;
        ST_VEW_WAIT: if (ew_out_valid) state <= ST_IDLE;
        ST_VRED_RD:  state <= ST_VRED_GO;
        ST_VRED_GO:  state <= ST_VRED_WAIT;
        ST_VRED_WAIT: if (red_out_valid) state <= ST_IDLE;
        ST_TK_RD:    state <= ST_TK_LATCH;
        ST_TK_LATCH: begin
          for (int i = 0; i < int'(LMAX); i++) tk_conf[i] <= vs_rd_data[i];
          state <= ST_TK_START;
        end
        ST_TK_START: state <= ST_TK_WAIT;
        ST_TK_WAIT: if (tk_done) begin tk_mask_q <= tk_mask; state <= ST_TK_WR; end
        ST_TK_WR:    state <= ST_IS_WAIT;
        ST_IS_START: state <= ST_IS_WAIT;
        ST_IS_WAIT:  if (is_done) state <= ST_IDLE;
        ST_LD:       state <= ST_IDLE;
        ST_MAP:      state <= ST_IDLE;
        ST_DQ_RD:    state <= ST_DQ_GO;
        ST_DQ_GO:    state <= ST_DQ_WAIT;
        ST_DQ_WAIT:  if (dq_out_valid) state <= ST_IDLE;
        ST_BC_CLR:   state <= ST_BC_ROW;
        ST_BC_ROW: begin
          cnt <= cnt + 1;
          if (cnt == 32'(ins.imm[15:0])) state <= ST_BC_FIN;
        end
        ST_BC_FIN:   state <= ST_IDLE;
        ST_BN_RD:    state <= ST_BN_GO;
        ST_BN_GO:    state <= ST_BN_WAIT;
        ST_BN_WAIT:  if (bz_out_valid) state <= ST_BN_WR;
        ST_BN_WR:    if (kq_out_valid) state <= ST_IDLE;
        ST_BS_RD:    state <= ST_BS_GO;
        ST_BS_GO:    state <= ST_BS_WAIT;
        ST_BS_WAIT:  if (bz_out_valid) state <= ST_IDLE;
        default:     state <= ST_IDLE;
      endcase
    end
  end

  assign busy = exec_busy || head_valid || v_pf_busy || m_pf_busy || is_busy || tok_valid;
endmodule
