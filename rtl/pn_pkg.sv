// pn_pkg: types, constants and arithmetic shared by the registration cores.
//
// Number formats. Non-quantised layer values (the first convolution, batch
// norm affine terms, the global feature) are signed 32-bit fixed point with 16
// fractional bits (Q16.16), as the paper specifies. Quantised activations are
// 8-bit unsigned LLT codes and quantised weights 8-bit signed codes. The small
// geometric computations (pose composition, exponential map, pseudoinverse,
// ReAgent update) run in IEEE-754 single precision, also as in the paper; the
// functions below implement that format with round-to-nearest (ties away from
// zero), denormals flushed to zero and overflow saturated to the largest
// finite value. The rounding mode and the special-value handling are this
// design's choices.
//
// Poses are 3x4 matrices [R|t] of FP32 values, row-major, packed as
// pose_t[row][col]. In external memory a pose is three 128-bit words, word r
// holding row r with column c in bits [32c+31:32c]. The packed matrix types
// use ascending ranges ([0:2][0:3]) on purpose, so that index [r][c] reads as
// the matrix element; lint tools note the ascending ranges, which are intended.
package pn_pkg;

  // ---- network dimensions (Sec. 4.1, Fig. 4/5) ----
  localparam int unsigned FEAT_DIM = 1024;   // global feature length K
  localparam int unsigned C1       = 64;     // Conv(3,64)
  localparam int unsigned C2       = 128;    // QuantConv(64,128)
  // ---- LLT quantisation (Sec. 4.1.1) ----
  localparam int unsigned K_LLT    = 9;      // sub-table granularity K
  localparam int unsigned BA       = 8;      // activation bits b_a
  localparam int unsigned BW       = 8;      // weight bits b_w
  localparam int unsigned QA       = (1 << BA) - 1;     // Q_a = 2^b_a - 1
  localparam int unsigned LUT_LEN  = K_LLT * QA + 1;    // K(2^b_a - 1) + 1
  // ---- ReAgent (Sec. 3.3) ----
  localparam int unsigned N_ACT    = 5;
  localparam int unsigned N_LABEL  = 2 * N_ACT + 1;
  // ---- external interface (Sec. 4.4) ----
  localparam int unsigned AXI_DW   = 128;
  localparam int unsigned AXI_AW   = 32;
  localparam int unsigned FX_FRAC  = 16;

  typedef logic signed [31:0] fx_t;   // Q16.16
  typedef logic        [31:0] fp_t;   // IEEE-754 binary32
  typedef logic [0:2][0:3][31:0] pose_t;
  typedef logic [0:2][0:2][31:0] fmat3_t;
  typedef logic [0:2][31:0]      fvec3_t;

  localparam fp_t FP_ZERO = 32'h0000_0000;
  localparam fp_t FP_ONE  = 32'h3F80_0000;
  localparam fp_t FP_MAX  = 32'h7F7F_FFFF;

  // Jacobian approximation selected by a control register (Sec. 4.2.1).
  typedef enum logic [1:0] {
    JAC_CENTRAL  = 2'd0,
    JAC_FORWARD  = 2'd1,
    JAC_BACKWARD = 2'd2
  } jac_mode_e;

  // Word counts of each layer's block in the parameter image (128-bit words).
  function automatic int unsigned words_of(input int unsigned n_items, input int unsigned per_word);
    return (n_items + per_word - 1) / per_word;
  endfunction
  // Conv(m,n): n*m Q16.16 weights, then n Q16.16 biases, 4 values per word.
  function automatic int unsigned conv_words(input int unsigned m, input int unsigned n);
    return words_of(n * m, 4) + words_of(n, 4);
  endfunction
  // QuantConv(m,n): n*m signed 8-bit codes, 16 per word.
  function automatic int unsigned qconv_words(input int unsigned m, input int unsigned n);
    return words_of(n * m, 16);
  endfunction
  // Quant(n): n scales, n shifts (Q16.16), then the LUT_LEN-entry table, 16 per word.
  function automatic int unsigned quant_words(input int unsigned n);
    return 2 * words_of(n, 4) + words_of(LUT_LEN, 16);
  endfunction
  // MaxPool(n) and a dequantise-only Quant(n): n scales then n shifts.
  function automatic int unsigned affine_words(input int unsigned n);
    return 2 * words_of(n, 4);
  endfunction
  function automatic int unsigned pointnet_words(input int unsigned c1, input int unsigned c2,
                                                 input int unsigned c3);
    return conv_words(3, c1) + quant_words(c1) + qconv_words(c1, c2) + quant_words(c2)
         + qconv_words(c2, c3) + affine_words(c3);
  endfunction

  // Q16.16 multiply with round-half-up and saturation.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = (64'(a) * 64'(b)) + 64'sd32768;
    p = p >>> FX_FRAC;
    if (p > 64'sh7FFF_FFFF)       return 32'sh7FFF_FFFF;
    else if (p < -64'sh8000_0000) return 32'sh8000_0000;
    else                          return fx_t'(p);
  endfunction

  // ---------------- binary32 arithmetic ----------------
  function automatic fp_t fp_pack(input logic s, input int e, input logic [24:0] m);
    // m holds the rounded significand with the hidden bit at [23] (or [24] on carry).
    logic [24:0] mm;
    int ee;
    mm = m;
    ee = e;
    if (mm[24]) begin
      mm = mm >> 1;
      ee = ee + 1;
    end
    if (mm[23] == 1'b0 || ee <= 0) return {s, 31'd0};
    if (ee >= 255) return {s, FP_MAX[30:0]};
    return {s, 8'(ee), mm[22:0]};
  endfunction

  function automatic fp_t fp_mul(input fp_t a, input fp_t b);
    logic s;
    logic [47:0] p;
    logic [24:0] m;
    int e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    // the product of two significands in [1,2) lies in [1,4): hidden bit at 46 or 47
    if (p[47]) begin
      m = {1'b0, p[47:24]} + 25'(p[23]);
      e = e + 1;
    end else begin
      m = {1'b0, p[46:23]} + 25'(p[22]);
    end
    return fp_pack(s, e, m);
  endfunction

  function automatic fp_t fp_add(input fp_t a, input fp_t b);
    fp_t x, y;
    int d, e, lz;
    logic [27:0] mx, my, sm;
    logic [24:0] m;
    if (a[30:23] == 8'd0) return b[30:23] == 8'd0 ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    e  = int'(x[30:23]);
    mx = {2'b01, x[22:0], 3'b000};
    my = {2'b01, y[22:0], 3'b000};
    if (d > 27) my = 28'd0;
    else        my = my >> d;
    if (x[31] == y[31]) sm = mx + my;
    else                sm = mx - my;
    if (sm == 28'd0) return FP_ZERO;
    if (sm[27]) begin
      sm = sm >> 1;
      e  = e + 1;
    end else begin
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sm[i]) break;
        lz++;
      end
      sm = sm << lz;
      e  = e - lz;
    end
    // sm[26] is the hidden bit, [25:3] the fraction, [2] the round bit.
    m = {1'b0, sm[26:3]} + 25'(sm[2]);
    return fp_pack(x[31], e, m);
  endfunction

  function automatic fp_t fp_neg(input fp_t a);
    return (a[30:23] == 8'd0) ? FP_ZERO : {~a[31], a[30:0]};
  endfunction

  function automatic fp_t fp_sub(input fp_t a, input fp_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp_t fp_div(input fp_t a, input fp_t b);
    logic s;
    logic [48:0] num;
    logic [25:0] q;
    logic [24:0] m;
    int e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0) return FP_ZERO;
    if (b[30:23] == 8'd0) return {s, FP_MAX[30:0]};
    num = {1'b1, a[22:0], 25'd0};
    q   = 26'(num / {25'd0, 1'b1, b[22:0]});
    e   = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[25]) m = {1'b0, q[25:2]} + 25'(q[1]);
    else begin
      m = {1'b0, q[24:1]} + 25'(q[0]);
      e = e - 1;
    end
    return fp_pack(s, e, m);
  endfunction

  // |a| < |b|
  function automatic logic fp_abs_lt(input fp_t a, input fp_t b);
    return a[30:0] < b[30:0];
  endfunction

  // Signed integer with `frac` fractional bits to binary32.
  function automatic fp_t int_to_fp(input logic signed [63:0] v, input int frac);
    logic s;
    logic [63:0] mag;
    int p, e;
    logic [24:0] m;
    logic [63:0] sh;
    if (v == 64'sd0) return FP_ZERO;
    s   = v[63];
    mag = s ? 64'(-v) : 64'(v);
    p = 0;
    for (int i = 0; i < 64; i++) if (mag[i]) p = i;
    e = 127 + p - frac;
    if (p >= 23) begin
      sh = mag >> (p - 23);
      m  = {1'b0, sh[23:0]};
      if (p > 23 && mag[p-24]) m = m + 25'd1;
    end else begin
      sh = mag << (23 - p);
      m  = {1'b0, sh[23:0]};
    end
    return fp_pack(s, e, m);
  endfunction

  function automatic fp_t fx_to_fp(input fx_t v);
    return int_to_fp(64'(v), FX_FRAC);
  endfunction

  // binary32 to Q16.16, rounding to nearest and saturating.
  function automatic fx_t fp_to_fx(input fp_t a);
    int e, sh;
    logic [55:0] mag;
    logic signed [32:0] r;
    if (a[30:23] == 8'd0) return 32'sd0;
    e  = int'(a[30:23]) - 127;
    if (e >= 15) return a[31] ? 32'sh8000_0001 : 32'sh7FFF_FFFF;
    sh = e - 23 + FX_FRAC;   // shift of the 24-bit significand
    mag = {32'd0, 1'b1, a[22:0]};
    if (sh >= 0) mag = mag << sh;
    else if (sh < -25) mag = 56'd0;
    else mag = (mag + (56'd1 << (-sh - 1))) >> (-sh);
    r = 33'(mag[31:0]);
    return a[31] ? fx_t'(-r) : fx_t'(r);
  endfunction

  function automatic fvec3_t mat3_vec(input fmat3_t a, input fvec3_t v);
    fvec3_t r;
    for (int i = 0; i < 3; i++)
      r[i] = fp_add(fp_add(fp_mul(a[i][0], v[0]), fp_mul(a[i][1], v[1])), fp_mul(a[i][2], v[2]));
    return r;
  endfunction

  function automatic fmat3_t mat3_mul(input fmat3_t a, input fmat3_t b);
    fmat3_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        r[i][j] = fp_add(fp_add(fp_mul(a[i][0], b[0][j]), fp_mul(a[i][1], b[1][j])),
                         fp_mul(a[i][2], b[2][j]));
    return r;
  endfunction

  function automatic fmat3_t pose_rot(input pose_t g);
    fmat3_t r;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) r[i][j] = g[i][j];
    return r;
  endfunction

  function automatic fvec3_t pose_trans(input pose_t g);
    fvec3_t t;
    for (int i = 0; i < 3; i++) t[i] = g[i][3];
    return t;
  endfunction

  function automatic pose_t make_pose(input fmat3_t r, input fvec3_t t);
    pose_t g;
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) g[i][j] = r[i][j];
      g[i][3] = t[i];
    end
    return g;
  endfunction

  function automatic pose_t pose_identity();
    pose_t g;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 4; j++) g[i][j] = (i == j) ? FP_ONE : FP_ZERO;
    return g;
  endfunction

  // a * b for rigid transforms: [Ra Rb | Ra tb + ta]
  function automatic pose_t pose_mul(input pose_t a, input pose_t b);
    fvec3_t t;
    t = mat3_vec(pose_rot(a), pose_trans(b));
    for (int i = 0; i < 3; i++) t[i] = fp_add(t[i], a[i][3]);
    return make_pose(mat3_mul(pose_rot(a), pose_rot(b)), t);
  endfunction

endpackage
