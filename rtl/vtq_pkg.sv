// vtq_pkg: shared types, constants and floating-point element functions of the
// VerTQ TurboQuant attention accelerator.
//
// Floating point: every arithmetic element works on IEEE binary32 values with
// denormals-as-zero on input and flush-to-zero on output (the DAZ/FTZ policy),
// round-to-nearest-even, and no exception or NaN handling. FP16 is used for the
// data that crosses the chip boundary (raw K, V, Q and the stored norms) and is
// widened to FP32 at the engine inputs. The negative exponential uses the
// fifth-order Taylor polynomial evaluated with Horner's rule after a base-2
// range reduction. Reciprocal and reciprocal square root use a seed plus three
// Newton-Raphson steps. The FP32-only datapath (instead of FP16 wherever it is
// accurate enough) is this design's simplification.
//
// TurboQuant constants: head dimension D = 128 (Qwen3-4B), a 3-bit Lloyd-Max
// codebook for a N(0,1/D) coordinate, 1-bit QJL signs for the key residual.
// The random signs of the Hadamard rotation and the Rademacher matrix come
// from a xorshift32 generator with fixed seeds, so the compressors and the
// query pre-decode always use the same matrices.
package vtq_pkg;

  typedef logic [31:0] fp32_t;
  typedef logic [15:0] fp16_t;

  // ---------------------------------------------------------------- sizes
  localparam int D      = 128;        // head dimension
  localparam int LOGD   = 7;
  localparam int QBITS  = 3;          // MSE codebook bits
  localparam int NCENT  = 8;          // 2**QBITS centroids
  localparam int BANK_W = 256;        // one memory bank port
  localparam int NBANK  = 9;          // banks in the memory interface
  localparam int ROW_W  = BANK_W * NBANK;
  localparam int AW     = 24;         // memory row address width (rows of NBANK x 256 bits)

  // ---------------------------------------------------------------- constants
  localparam fp32_t FP_ZERO     = 32'h0000_0000;
  localparam fp32_t FP_ONE      = 32'h3f80_0000;
  localparam fp32_t FP_TWO      = 32'h4000_0000;
  localparam fp32_t FP_1P5      = 32'h3fc0_0000;
  localparam fp32_t FP_LN2      = 32'h3f31_7218;
  localparam fp32_t FP_INV_LN2  = 32'h3fb8_aa3b;
  localparam fp32_t FP_INV_SQRT_D = 32'h3db5_04f3;  // 1/sqrt(128)
  localparam fp32_t FP_QJL_C    = 32'h3c20_6c99;    // sqrt(pi/2)/128
  localparam fp32_t FP_RCP_C0   = 32'h4034_b4b5;    // 48/17
  localparam fp32_t FP_RCP_C1   = 32'h3ff0_f0f1;    // 32/17

  // Lloyd-Max 3-bit quantiser for N(0,1): levels 0.2451, 0.7560, 1.3440,
  // 2.1520 (and negatives). Thresholds are the midpoints of adjacent levels.
  localparam fp32_t CB_N01 [NCENT] = '{
    32'hc009_ba5e, 32'hbfac_0831, 32'hbf41_8937, 32'hbe7a_fb7f,
    32'h3e7a_fb7f, 32'h3f41_8937, 32'h3fac_0831, 32'h4009_ba5e };
  localparam fp32_t TH_N01 [NCENT-1] = '{
    32'hbfdf_be77, 32'hbf86_6666, 32'hbf00_240b, 32'h0000_0000,
    32'h3f00_240b, 32'h3f86_6666, 32'h3fdf_be77 };

  localparam logic [31:0] RHT_SEED = 32'h1234_5678;   // Hadamard sign seed
  localparam logic [31:0] RAD_SEED = 32'h9abc_def1;   // Rademacher matrix seed

  // ---------------------------------------------------------------- types
  typedef logic [D-1:0][31:0] vec32_t;
  typedef logic [D-1:0][15:0] vec16_t;
  typedef logic [D-1:0][QBITS-1:0] idxvec_t;

  // Compressed key: TurboQuant-Prod (3-bit MSE + 1-bit QJL of the residual).
  typedef struct packed {
    idxvec_t      idx;     // codebook indices of the rotated unit key
    logic [D-1:0] qjl;     // 1 = negative sign of (S r)_j
    fp16_t        norm;    // ||k||
    fp16_t        rnorm;   // ||r||, r = u - dequant(u)
  } ckey_t;

  // Compressed value: TurboQuant-MSE (3-bit).
  typedef struct packed {
    idxvec_t idx;
    fp16_t   norm;
  } cval_t;

  typedef struct packed {
    ckey_t k;
    cval_t v;
  } ckv_t;

  localparam int CKV_W = $bits(ckv_t);   // 944 bits, banks 0..3 of a row

  typedef enum logic [3:0] {
    OP_ADD, OP_SUB, OP_MUL, OP_FMA, OP_RECIP, OP_RSQRT, OP_SQRT,
    OP_EXPNEG, OP_F16TO32, OP_F32TO16, OP_MAX
  } fpop_e;

  typedef enum logic [7:0] {
    CMD_NONE     = 8'd0,
    CMD_COMPRESS = 8'd1,   // compress COUNT raw K/V rows into compressed rows
    CMD_ATTEND   = 8'd2    // attention of one query over COUNT compressed rows
  } cmd_e;

  // ---------------------------------------------------------------- PRNG
  function automatic logic [31:0] xorshift32(logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // D pseudo-random bits: bit j is the lsb of the (j+1)-th xorshift32 state.
  function automatic logic [D-1:0] prng_bits(logic [31:0] seed);
    logic [31:0] s;
    logic [D-1:0] b;
    s = (seed == 32'd0) ? 32'h0000_0001 : seed;
    for (int j = 0; j < D; j++) begin
      s = xorshift32(s);
      b[j] = s[0];
    end
    return b;
  endfunction

  // Random sign vector of the Hadamard rotation (1 = negate).
  function automatic logic [D-1:0] rht_signs();
    return prng_bits(RHT_SEED);
  endfunction

  // Column i of the Rademacher matrix S (bit j set: S[j][i] = -1).
  function automatic logic [D-1:0] rad_column(int unsigned i);
    return prng_bits(RAD_SEED ^ (32'(i) * 32'h9e37_79b9));
  endfunction

  // ---------------------------------------------------------------- FP32
  function automatic logic fp32_is_zero(fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  // a < b, with DAZ (both zeros equal)
  function automatic logic fp32_lt(fp32_t a, fp32_t b);
    logic za, zb;
    za = fp32_is_zero(a);
    zb = fp32_is_zero(b);
    if (za && zb) return 1'b0;
    if (za) return !b[31];
    if (zb) return a[31];
    if (a[31] != b[31]) return a[31];
    if (!a[31]) return a[30:0] < b[30:0];
    return a[30:0] > b[30:0];
  endfunction

  function automatic fp32_t fp32_max(fp32_t a, fp32_t b);
    return fp32_lt(a, b) ? b : a;
  endfunction

  function automatic fp32_t fp32_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t x, y;
    int ex, ey, er, sh, lz;
    logic [26:0] mx, my;
    logic [27:0] s;
    logic [24:0] m;
    logic g, st, found;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? {a[31] & b[31], 31'b0} : b;
    if (b[30:23] == 8'd0) return a;
    if (b[30:0] > a[30:0]) begin x = b; y = a; end
    else begin x = a; y = b; end
    ex = int'(x[30:23]);
    ey = int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    sh = ex - ey;
    if (sh > 26) my = 27'd1;
    else if (sh > 0) begin
      st = 1'b0;
      for (int i = 0; i < 27; i++) if (i < sh && my[i]) st = 1'b1;
      my = (my >> sh) | {26'd0, st};
    end
    if (x[31] == y[31]) s = {1'b0, mx} + {1'b0, my};
    else s = {1'b0, mx} - {1'b0, my};
    if (s == 28'd0) return FP_ZERO;
    er = ex;
    if (s[27]) begin
      s = {1'b0, s[27:2], s[1] | s[0]};
      er = er + 1;
    end else begin
      lz = 0;
      found = 1'b0;
      for (int i = 26; i >= 0; i--) begin
        if (!found && s[i]) begin lz = 26 - i; found = 1'b1; end
      end
      s = s << lz;
      er = er - lz;
    end
    g  = s[2];
    st = s[1] | s[0];
    m  = {1'b0, s[26:3]};
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; er = er + 1; end
    if (er <= 0) return {x[31], 31'b0};
    if (er >= 255) return {x[31], 8'hff, 23'b0};
    return {x[31], 8'(er), m[22:0]};
  endfunction

  function automatic fp32_t fp32_sub(fp32_t a, fp32_t b);
    return fp32_add(a, fp32_neg(b));
  endfunction

  function automatic fp32_t fp32_mul(fp32_t a, fp32_t b);
    logic sr, g, st;
    int er;
    logic [47:0] p;
    logic [24:0] m;
    sr = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {sr, 31'b0};
    p  = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    er = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m  = {1'b0, p[47:24]};
      g  = p[23];
      st = |p[22:0];
      er = er + 1;
    end else begin
      m  = {1'b0, p[46:23]};
      g  = p[22];
      st = |p[21:0];
    end
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; er = er + 1; end
    if (er <= 0) return {sr, 31'b0};
    if (er >= 255) return {sr, 8'hff, 23'b0};
    return {sr, 8'(er), m[22:0]};
  endfunction

  // Multiply-add with a rounding after the product (not fused).
  function automatic fp32_t fp32_fma(fp32_t a, fp32_t b, fp32_t c);
    return fp32_add(fp32_mul(a, b), c);
  endfunction

  // Multiply by 2**k by exponent arithmetic, with flush to zero.
  function automatic fp32_t fp32_scale2(fp32_t a, int k);
    int e;
    if (a[30:23] == 8'd0) return {a[31], 31'b0};
    e = int'(a[30:23]) + k;
    if (e <= 0) return {a[31], 31'b0};
    if (e >= 255) return {a[31], 8'hff, 23'b0};
    return {a[31], 8'(e), a[22:0]};
  endfunction

  // 1/a: mantissa d in [0.5,1), seed 48/17 - 32/17 d, three Newton steps.
  function automatic fp32_t fp32_recip(fp32_t a);
    fp32_t d, y;
    int ea;
    if (a[30:23] == 8'd0) return {a[31], 8'hff, 23'b0};
    ea = int'(a[30:23]);
    d  = {1'b0, 8'd126, a[22:0]};
    y  = fp32_sub(FP_RCP_C0, fp32_mul(FP_RCP_C1, d));
    for (int i = 0; i < 3; i++)
      y = fp32_mul(y, fp32_sub(FP_TWO, fp32_mul(d, y)));
    y = fp32_scale2(y, 126 - ea);
    return {a[31], y[30:0]};
  endfunction

  // 1/sqrt(a) for a > 0: bit-level seed plus three Newton steps.
  function automatic fp32_t fp32_rsqrt(fp32_t a);
    fp32_t y, h;
    if (a[30:23] == 8'd0 || a[31]) return 32'h7f80_0000;
    y = 32'h5f37_59df - {1'b0, a[31:1]};
    h = fp32_scale2(a, -1);
    for (int i = 0; i < 3; i++)
      y = fp32_mul(y, fp32_sub(FP_1P5, fp32_mul(h, fp32_mul(y, y))));
    return y;
  endfunction

  function automatic fp32_t fp32_sqrt(fp32_t a);
    if (a[30:23] == 8'd0 || a[31]) return FP_ZERO;
    return fp32_mul(a, fp32_rsqrt(a));
  endfunction

  // floor of a non-negative value, saturated to 255
  function automatic int fp32_floor_u8(fp32_t a);
    int e;
    logic [23:0] m;
    if (a[31] || a[30:23] < 8'd127) return 0;
    e = int'(a[30:23]) - 127;
    if (e >= 8) return 255;
    m = {1'b1, a[22:0]};
    return int'(m >> (23 - e));
  endfunction

  // small non-negative integer to FP32 (exact)
  function automatic fp32_t fp32_from_u8(int k);
    logic [7:0] v;
    int p;
    if (k <= 0) return FP_ZERO;
    v = 8'(k);
    p = 0;
    for (int i = 0; i < 8; i++) if (v[i]) p = i;
    return {1'b0, 8'(127 + p), 23'(({15'd0, v} << (23 - p)) & 23'h7f_ffff)};
  endfunction

  // exp(-|a|): |a| = k ln2 + r, r in [0, ln2); e^-r by the fifth-order Taylor
  // polynomial 1 - r(1 - r/2(1 - r/3(1 - r/4(1 - r/5)))) in Horner form.
  function automatic fp32_t fp32_exp_neg(fp32_t a);
    fp32_t x, r, p;
    int k;
    x = {1'b0, a[30:0]};
    if (x[30:23] == 8'd0) return FP_ONE;
    k = fp32_floor_u8(fp32_mul(x, FP_INV_LN2));
    if (k >= 126) return FP_ZERO;
    r = fp32_sub(x, fp32_mul(fp32_from_u8(k), FP_LN2));
    if (r[31]) r = FP_ZERO;
    p = fp32_sub(FP_ONE, fp32_mul(r, 32'h3e4c_cccd));          // 1 - r/5
    p = fp32_sub(FP_ONE, fp32_mul(fp32_mul(r, 32'h3e80_0000), p));  // 1 - r/4 p
    p = fp32_sub(FP_ONE, fp32_mul(fp32_mul(r, 32'h3eaa_aaab), p));  // 1 - r/3 p
    p = fp32_sub(FP_ONE, fp32_mul(fp32_mul(r, 32'h3f00_0000), p));  // 1 - r/2 p
    p = fp32_sub(FP_ONE, fp32_mul(r, p));                           // 1 - r p
    return fp32_scale2(p, -k);
  endfunction

  // ---------------------------------------------------------------- FP16
  function automatic fp32_t fp16_to_fp32(fp16_t h);
    if (h[14:10] == 5'd0) return {h[15], 31'b0};
    if (h[14:10] == 5'h1f) return {h[15], 8'hff, h[9:0], 13'b0};
    return {h[15], 8'(h[14:10]) + 8'd112, h[9:0], 13'b0};
  endfunction

  function automatic fp16_t fp32_to_fp16(fp32_t f);
    int ne;
    logic [11:0] r;
    logic g, st;
    ne = int'(f[30:23]) - 112;
    if (f[30:23] == 8'd0 || ne <= 0) return {f[31], 15'b0};
    r  = {2'b01, f[22:13]};
    g  = f[12];
    st = |f[11:0];
    if (g && (st || r[0])) r = r + 12'd1;
    if (r[11]) begin r = r >> 1; ne = ne + 1; end
    if (ne >= 31) return {f[31], 5'h1f, 10'b0};
    return {f[31], 5'(ne), r[9:0]};
  endfunction

  // ---------------------------------------------------------------- codebook
  // Codebook for a coordinate of a unit D-vector: N(0,1) levels / sqrt(D).
  function automatic fp32_t centroid(logic [QBITS-1:0] i);
    return fp32_mul(CB_N01[i], FP_INV_SQRT_D);
  endfunction

  function automatic fp32_t threshold(int i);
    return fp32_mul(TH_N01[i], FP_INV_SQRT_D);
  endfunction

  // Index of the nearest centroid: number of thresholds below x.
  function automatic logic [QBITS-1:0] quantize(fp32_t x);
    logic [QBITS-1:0] n;
    n = '0;
    for (int i = 0; i < NCENT - 1; i++)
      if (!fp32_lt(x, threshold(i))) n = n + 1'b1;
    return n;
  endfunction

endpackage
