// dart_pkg: types, default sizes, instruction encoding and BF16/MX arithmetic
// shared by every DART module.
//
// Number formats. Vector data are BF16 (1 sign, 8 exponent, 7 mantissa bits).
// The functions below flush subnormals to zero, saturate overflow to the
// largest finite value and round to nearest (ties away from zero); NaN and
// infinity are not produced. MX data are signed integer elements (MXINT) that
// share one power-of-two scale per block of MX_BLOCK elements; a scale is kept
// here as a signed 8-bit exponent (value = element * 2^scale), i.e. the E8M0
// code minus its bias of 127.
//
// exp() is computed as 2^(x*log2 e) with a cubic polynomial for the fraction,
// 1/x as an integer division of the significand, sqrt as an integer square
// root, and log2 (used for the BAOS power transform f^alpha) with a quadratic
// correction. All are single-cycle combinational functions; the units that
// use them register their results.
//
// Sizes: BLEN=64, MLEN=512, VLEN=2048 are the operating point of the paper's
// main results table. The head dimension D=128 and MX block size 32 are not
// given by the paper (LLaDA-8B head size and the OCP MX block size). The
// 64-bit instruction encoding and the opcode numbers are this design's own:
// only the instruction names of the sampling path come from the paper.
package dart_pkg;

  // ---------------- default sizes ----------------
  localparam int unsigned BLEN_D     = 64;    // PE sub-array side
  localparam int unsigned MLEN_D     = 512;   // K slice fed per cycle
  localparam int unsigned VLEN_D     = 2048;  // vector lanes
  localparam int unsigned HEAD_DIM_D = 128;   // D, attention head dimension
  localparam int unsigned MX_BLOCK_D = 32;    // elements sharing one MX scale
  localparam int unsigned L_D        = 32;    // generation block length L
  localparam int unsigned B_D        = 16;    // batch size B
  localparam int unsigned SAMP_LMAX  = 64;    // longest block the top-k unit takes
  localparam int unsigned SAMP_KMAX  = 32;    // largest k of the top-k unit

  typedef logic [15:0] bf16_t;
  typedef logic signed [7:0] mxscale_t;

  localparam bf16_t BF16_ZERO    = 16'h0000;
  localparam bf16_t BF16_ONE     = 16'h3F80;
  localparam bf16_t BF16_MAX     = 16'h7F7F;
  localparam bf16_t BF16_NEG_MAX = 16'hFF7F;

  // ---------------- instruction encoding ----------------
  typedef enum logic [7:0] {
    OP_NOP          = 8'h00,
    // HBM class
    OP_H_PREFETCH_V = 8'h01,  // vsram[gp[rs1]]          <- hbm[gp[rs2]+imm]
    OP_H_PREFETCH_M = 8'h02,  // msram[gp[rs1]]          <- hbm[gp[rs2]+imm]
    OP_H_STORE_V    = 8'h03,  // hbm[gp[rs2]+imm]        <- vsram[gp[rs1]]
    // matrix class
    OP_M_MM         = 8'h10,  // array += X(vsram gp[rs1]..+BLEN) * W(msram gp[rs2]..+MLEN, cols imm[15:0]);
                              //   imm[16] = clear the accumulators first
    OP_M_TMM        = 8'h11,  // as M_MM, W = msram rows gp[rs2]..+BLEN read transposed
    OP_M_SUM        = 8'h12,  // vsram[gp[rd]..+BLEN][imm..+BLEN] <- adder tree of sub-arrays
    // vector class
    OP_V_ADD_VV     = 8'h20,  // vsram[gp[rd]] <- vsram[gp[rs1]] + vsram[gp[rs2]]
    OP_V_SUB_VV     = 8'h21,
    OP_V_MUL_VV     = 8'h22,
    OP_V_MUL_VF     = 8'h23,  // vsram[gp[rd]] <- vsram[gp[rs1]] * fp[rs2] (broadcast)
    OP_V_EXP_V      = 8'h24,  // vsram[gp[rd]] <- exp(vsram[gp[rs1]] - fp[rs2])
    OP_V_RED_MAX_IDX= 8'h25,  // fp[rd], gp[rd] <- max, argmax (lane + gp[rs2]) of vsram[gp[rs1]];
                              //   imm[0] = continue the previous chunk's running result
    OP_V_RED_SUM    = 8'h26,  // fp[rd] <- sum of vsram[gp[rs1]]; imm[0] = continue the running sum
    OP_V_TOPK_MASK  = 8'h27,  // isram[imm[15:0]+i] <- i in top gp[rd] of vsram[gp[rs1]][i], i < imm[31:16],
                              //   among positions with isram[gp[rs2]+i] != 0
    OP_V_SELECT_INT = 8'h28,  // isram[gp[rd]+i] <- isram[gp[rs1]+i] ? isram[imm[15:0]+i] : isram[imm[31:16]+i],
                              //   i < gp[rs2]
    OP_V_EQ_INT     = 8'h29,  // isram[gp[rd]+i] <- (isram[gp[rs1]+i] == gp[rs2]), i < imm
    // scalar class
    OP_S_LI_INT     = 8'h30,  // gp[rd] <- imm
    OP_S_ADDI_INT   = 8'h31,  // gp[rd] <- gp[rs1] + imm
    OP_S_ADD_INT    = 8'h32,
    OP_S_SUB_INT    = 8'h33,
    OP_S_MUL_INT    = 8'h34,
    OP_S_DIV_INT    = 8'h35,
    OP_S_LI_FP      = 8'h38,  // fp[rd] <- imm[15:0]
    OP_S_ADD_FP     = 8'h39,
    OP_S_SUB_FP     = 8'h3A,
    OP_S_MUL_FP     = 8'h3B,
    OP_S_DIV_FP     = 8'h3C,
    OP_S_EXP_FP     = 8'h3D,
    OP_S_RECIP      = 8'h3E,  // fp[rd] <- 1/fp[rs1]
    OP_S_SQRT       = 8'h3F,
    OP_S_ST_FP      = 8'h40,  // fpsram[gp[rs1]+imm] <- fp[rd]
    OP_S_ST_INT     = 8'h41,  // isram[gp[rs1]+imm]  <- gp[rd]
    OP_S_LD_FP      = 8'h42,  // fp[rd] <- fpsram[gp[rs1]+imm]
    OP_S_LD_INT     = 8'h43,  // gp[rd] <- isram[gp[rs1]+imm]
    OP_S_MAP_V_FP   = 8'h44,  // vsram[gp[rd]][0..imm) <- fpsram[0..imm)
    OP_M_DEQ_V      = 8'h45,  // vsram[gp[rd]][0..MLEN) <- dequantize(msram[gp[rs1]])
    // BAOS (KV smoothing)
    // lanes 0..D-1 of a Vector SRAM row hold one token's channels; slot = rs2
    OP_B_CALIB      = 8'h50,  // calibrate on vsram rows gp[rs1]..+imm[15:0]; imm[16] = minmax,
                              //   imm[25:17] = alpha (Q1.8)
    OP_B_NORM_K     = 8'h51,  // msram[gp[rd]] <- MX((vsram[gp[rs1]][0..D) - c)/f), other lanes 0
    OP_B_SCALE_Q    = 8'h52,  // vsram[gp[rd]][0..D) <- vsram[gp[rs1]][0..D) * f
    // output
    OP_S_OUT_TOK    = 8'h60   // token FIFO <- isram[gp[rs1]..+imm)
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [40:0] imm;
  } instr_t;  // 64 bits

  // ---------------- BF16 helpers ----------------
  function automatic logic bf16_is_zero(input bf16_t a);
    return a[14:7] == 8'd0;
  endfunction

  // pack sign, biased exponent (may be out of range) and 7-bit mantissa
  function automatic bf16_t bf16_pack(input logic s, input int e, input logic [6:0] m);
    if (e <= 0) return BF16_ZERO;
    if (e >= 255) return {s, BF16_MAX[14:0]};
    return {s, e[7:0], m};
  endfunction

  // round a normalised significand held in sig[W-1:0] with sig[W-1]==1
  // to 7 fractional bits; returns {carry, mantissa}
  function automatic logic [8:0] bf16_round(input logic [31:0] sig);
    // sig[31] is the leading one; mantissa is sig[30:24], round bit sig[23]
    logic [8:0] r;
    r = {1'b0, 1'b1, sig[30:24]} + {8'd0, sig[23]};
    return r; // r[8] set means significand rolled over to 2.0
  endfunction

  function automatic bf16_t bf16_norm(input logic s, input int e, input logic [31:0] sig);
    // value = sig * 2^(e-127-31), sig nonzero
    logic [31:0] x;
    int          ee;
    logic [8:0]  r;
    x  = sig;
    ee = e;
    if (x == 32'd0) return BF16_ZERO;
    for (int i = 0; i < 32; i++) begin
      if (!x[31]) begin
        x  = x << 1;
        ee = ee - 1;
      end
    end
    r = bf16_round(x);
    if (r[8]) return bf16_pack(s, ee + 1, 7'd0);
    return bf16_pack(s, ee, r[6:0]);
  endfunction

  function automatic bf16_t bf16_mul(input bf16_t a, input bf16_t b);
    logic [15:0] p;
    if (bf16_is_zero(a) || bf16_is_zero(b)) return BF16_ZERO;
    p = {1'b1, a[6:0]} * {1'b1, b[6:0]};  // 1.14 fixed point, in [1,4)
    return bf16_norm(a[15] ^ b[15], int'(a[14:7]) + int'(b[14:7]) - 127 + 1, {p, 16'd0});
  endfunction

  function automatic bf16_t bf16_add(input bf16_t a, input bf16_t b);
    bf16_t       x, y;
    int          d;
    logic [31:0] mx, my, sum;
    if (bf16_is_zero(a)) return bf16_is_zero(b) ? BF16_ZERO : b;
    if (bf16_is_zero(b)) return a;
    // x has the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = int'(x[14:7]) - int'(y[14:7]);
    mx = {1'b0, 1'b1, x[6:0], 23'd0};
    my = (d > 30) ? 32'd0 : ({1'b0, 1'b1, y[6:0], 23'd0} >> d);
    if (x[15] == y[15]) sum = mx + my;
    else sum = mx - my;
    if (sum == 32'd0) return BF16_ZERO;
    return bf16_norm(x[15], int'(x[14:7]) + 1, sum);
  endfunction

  function automatic bf16_t bf16_sub(input bf16_t a, input bf16_t b);
    return bf16_add(a, {~b[15], b[14:0]});
  endfunction

  // a > b
  function automatic logic bf16_gt(input bf16_t a, input bf16_t b);
    logic za, zb;
    za = bf16_is_zero(a);
    zb = bf16_is_zero(b);
    if (za && zb) return 1'b0;
    if (za) return b[15];
    if (zb) return !a[15];
    if (a[15] != b[15]) return b[15];
    if (!a[15]) return a[14:0] > b[14:0];
    return a[14:0] < b[14:0];
  endfunction

  // signed integer scaled by 2^-frac to BF16
  function automatic bf16_t bf16_from_int(input logic signed [31:0] v, input int frac);
    logic [31:0] mag;
    if (v == 0) return BF16_ZERO;
    mag = v[31] ? 32'(-v) : 32'(v);
    return bf16_norm(v[31], 127 + 31 - frac, mag);
  endfunction

  // BF16 to signed fixed point with frac fractional bits (truncating, saturating)
  function automatic logic signed [31:0] bf16_to_fix(input bf16_t a, input int frac);
    int          sh;
    logic [63:0] mag;
    if (bf16_is_zero(a)) return 32'sd0;
    sh = int'(a[14:7]) - 127 - 7 + frac;  // left shift of the 8-bit significand
    if (sh > 23) mag = 64'h7FFF_FFFF;
    else if (sh >= 0) mag = 64'({1'b1, a[6:0]}) << sh;
    else if (sh > -9) mag = 64'({1'b1, a[6:0]}) >> (-sh);
    else mag = 64'd0;
    return a[15] ? -$signed(mag[31:0]) : $signed(mag[31:0]);
  endfunction

  // 2^y for y in signed Q15.16 fixed point
  function automatic bf16_t exp2_fix(input logic signed [31:0] y);
    logic signed [31:0] n;
    logic [15:0]        f;
    logic [47:0]        t;
    logic [31:0]        p;   // 2^f in Q16 fixed point, [1,2)
    n = y >>> 16;
    f = y[15:0];
    // 2^f ~= 1 + f*(0.695556 + f*(0.226173 + f*0.078094))   (Q16 coefficients)
    t = 48'(f) * 48'd5118;            // 0.078094
    p = 32'd14822 + 32'(t >> 16);     // 0.226173
    t = 48'(f) * 48'(p);
    p = 32'd45584 + 32'(t >> 16);     // 0.695556
    t = 48'(f) * 48'(p);
    p = 32'd65536 + 32'(t >> 16);
    if (n < -126) return BF16_ZERO;
    if (n > 127) return BF16_MAX;
    return bf16_norm(1'b0, int'(n) + 127, {p[16:0], 15'd0});
  endfunction

  // e^x
  function automatic bf16_t bf16_exp(input bf16_t x);
    logic signed [31:0] xf;
    logic signed [63:0] y;
    xf = bf16_to_fix(x, 16);
    if (xf < -32'sd6553600) return BF16_ZERO;          // x < -100
    if (xf > 32'sd5767168) return BF16_MAX;            // x > 88
    y = 64'(xf) * 64'sd94548;                          // log2(e) in Q16
    return exp2_fix(32'(y >>> 16));
  endfunction

  // 1/x
  function automatic bf16_t bf16_recip(input bf16_t x);
    logic [31:0] q;
    if (bf16_is_zero(x)) return {x[15], BF16_MAX[14:0]};
    q = 32'h4000_0000 / 32'({1'b1, x[6:0]});   // 2^30 / M, M in [128,256)
    return bf16_norm(x[15], 127 - (int'(x[14:7]) - 127) + 8, q);
  endfunction

  function automatic bf16_t bf16_div(input bf16_t a, input bf16_t b);
    return bf16_mul(a, bf16_recip(b));
  endfunction

  function automatic bf16_t bf16_sqrt(input bf16_t x);
    int          e;
    logic [23:0] r;
    logic [23:0] s, bit_v;
    if (bf16_is_zero(x) || x[15]) return BF16_ZERO;
    e = int'(x[14:7]) - 127;
    if (e % 2 != 0) begin
      r = 24'({1'b1, x[6:0]}) << 12;
      e = e - 1;
    end else begin
      r = 24'({1'b1, x[6:0]}) << 11;
    end
    // integer square root of r (result below 1024)
    s = 24'd0;
    bit_v = 24'h40_0000;
    for (int i = 0; i < 12; i++) begin
      if (r >= s + bit_v) begin
        r = r - (s + bit_v);
        s = (s >> 1) + bit_v;
      end else begin
        s = s >> 1;
      end
      bit_v = bit_v >> 2;
    end
    return bf16_norm(1'b0, e / 2 + 127 + 31 - 9, {8'd0, s});
  endfunction

  // log2(x) for x > 0, result in signed Q15.16
  function automatic logic signed [31:0] log2_fix(input bf16_t x);
    logic [15:0] m;
    logic [31:0] corr;
    m = {x[6:0], 9'd0};                       // fraction in Q16
    // log2(1+m) ~= m + 0.3466*m*(1-m)
    corr = (32'(m) * 32'(17'h10000 - 17'(m))) >> 16;
    corr = (corr * 32'd22714) >> 16;          // 0.3466
    return ((int'(x[14:7]) - 127) <<< 16) + $signed(32'(m)) + $signed(corr);
  endfunction

  // x^alpha, alpha in unsigned Q1.8 (256 = 1.0)
  function automatic bf16_t bf16_pow_alpha(input bf16_t x, input logic [8:0] alpha);
    logic signed [47:0] y;
    if (bf16_is_zero(x)) return BF16_ZERO;
    if (alpha == 9'd256) return {1'b0, x[14:0]};
    y = 48'(log2_fix({1'b0, x[14:0]})) * 48'(signed'({1'b0, alpha}));
    return exp2_fix(32'(y >>> 8));
  endfunction

  // ---------------- MX helpers ----------------
  // arithmetic shift of a product by a signed amount (left if positive)
  function automatic logic signed [31:0] ashift(input logic signed [31:0] v, input int sh);
    if (sh >= 31) return (v == 0) ? 32'sd0 : (v < 0 ? 32'sh8000_0000 : 32'sh7FFF_FFFF);
    if (sh >= 0) return v <<< sh;
    if (sh <= -31) return (v < 0) ? -32'sd1 : 32'sd0;
    return v >>> (-sh);
  endfunction

endpackage
