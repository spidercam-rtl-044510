// spidercam_pkg: types, constants and shared arithmetic for the SpiderCam
// depth-from-differential-defocus (DfDD) streaming pipeline.
//
// Number format. Everything after the preprocessor is IEEE-754 half precision
// (FP16: 1 sign, 5 exponent with bias 15, 10 fraction bits) with subnormal
// numbers removed: an operand with a zero exponent is read as zero and a result
// that would be subnormal is flushed to zero. With the hidden bit always one,
// the product or quotient of two mantissas has its leading one in one of two
// known places, so multiply and divide need no variable shifter. Exponent 31
// is read as infinity (no NaN is produced: 0/0 and inf-inf give infinity).
// Rounding is round-to-nearest-even. FP16 and the missing subnormals follow the
// paper; rounding mode and the inf/NaN handling are this design's choice.
//
// Stream timing. The whole pipeline advances in lock step on one pixel enable
// (en): one raster position per enabled cycle. Every stage has a fixed latency
// in enabled cycles ("lag"); a signal of lag L carries, in the enabled cycle
// with global index t (t = 0 at start of frame), the value of raster position
// t - L. The lag functions below are shared by the modules and their parents so
// that streams can be re-aligned with delay lines.
package spidercam_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;

  // Maximum number of scales and radial zones the port arrays are sized for.
  localparam int MAX_SCALES = 3;
  localparam int MAX_ZONES  = 16;

  // One-dimensional kernels used by the separable FP16 stream filters.
  //   K1_GAUSS5 : [1 4 6 4 1]/16, taps -2..+2 (Burt-Adelson)
  //   K1_BOX2   : [1 1]/2, taps 0..+1 ("tl" crop, downsampler)
  //   K1_UP4    : [1 3 3 1]/4, taps -2..+1 ("br" crop, upsampler)
  //   K1_PASS3  : centre tap of a 3-tap window, taps -1..+1
  //   K1_DERIV3 : [-1 0 1]/2, taps -1..+1
  // Taps are spaced by the dilation 2^scale.
  typedef enum logic [2:0] {
    K1_GAUSS5 = 3'd0,
    K1_BOX2   = 3'd1,
    K1_UP4    = 3'd2,
    K1_PASS3  = 3'd3,
    K1_DERIV3 = 3'd4
  } kern1d_e;

  // Two-dimensional separable kernels (horizontal pass, then vertical pass).
  typedef enum logic [2:0] {
    K2_GAUSS = 3'd0,
    K2_DOWN  = 3'd1,
    K2_UP    = 3'd2,
    K2_PASS  = 3'd3,
    K2_DX    = 3'd4,
    K2_DY    = 3'd5
  } kern2d_e;

  function automatic int kern_omin(kern1d_e k);
    case (k)
      K1_GAUSS5: return -2;
      K1_BOX2:   return 0;
      K1_UP4:    return -2;
      default:   return -1;
    endcase
  endfunction

  function automatic int kern_omax(kern1d_e k);
    case (k)
      K1_GAUSS5: return 2;
      default:   return 1;
    endcase
  endfunction

  function automatic kern1d_e kern_h(kern2d_e k);
    case (k)
      K2_GAUSS: return K1_GAUSS5;
      K2_DOWN:  return K1_BOX2;
      K2_UP:    return K1_UP4;
      K2_DX:    return K1_DERIV3;
      default:  return K1_PASS3;
    endcase
  endfunction

  function automatic kern1d_e kern_v(kern2d_e k);
    case (k)
      K2_GAUSS: return K1_GAUSS5;
      K2_DOWN:  return K1_BOX2;
      K2_UP:    return K1_UP4;
      K2_DY:    return K1_DERIV3;
      default:  return K1_PASS3;
    endcase
  endfunction

  // Lag of a registered 1-D filter: the centre trails the newest tap by
  // omax*dil samples (horizontal) or omax*dil lines (vertical), plus the
  // output register.
  function automatic int lag1d_h(kern1d_e k, int dil);
    return kern_omax(k) * dil + 1;
  endfunction
  function automatic int lag1d_v(kern1d_e k, int dil, int w);
    return kern_omax(k) * dil * w + 1;
  endfunction
  function automatic int lag2d(kern2d_e k, int dil, int w);
    return lag1d_h(kern_h(k), dil) + lag1d_v(kern_v(k), dil, w);
  endfunction

  // Lag of the preprocessor: box 3x3 (2 + W+1), subtraction (1), Gaussian
  // 5x5 (3 + 2W+1), conversion to FP16 (1), sum/difference (1).
  function automatic int pre_lag(int w, bit pre_en);
    return pre_en ? (2 + w + 1) + 1 + (3 + 2 * w + 1) + 2 : 2;
  endfunction

  // Lags inside one scale pipeline (see scale_pipeline for the stage list).
  function automatic int scale_lag_down(int n, int w);   // to the downsampled outputs
    return lag2d(K2_GAUSS, 1 << n, w) + lag2d(K2_DOWN, 1 << n, w);
  endfunction
  function automatic int scale_lag_vw(int n, int w, bit dxdy);  // to V,W aligned
    // Gaussian, downsampler, zero inserter (1), upsampler, Laplacian
    // subtractor (1), a*Lap (1), b*V (1), bV - I_delta (1)
    return scale_lag_down(n, w) + 1 + lag2d(K2_UP, 1 << n, w) + 4;
  endfunction
  function automatic int scale_lag_prod(int n, int w, bit dxdy); // to VW_N, WW_N at scale resolution
    return scale_lag_vw(n, w, dxdy) + (dxdy ? lag2d(K2_PASS, 1 << n, w) : 0) + 3;
  endfunction
  function automatic int scale_lag_out(int n, int w, bit dxdy);  // after the upsampling chain
    int l;
    l = scale_lag_prod(n, w, dxdy);
    for (int k = n - 1; k >= 0; k--) l += 1 + lag2d(K2_UP, 1 << k, w);
    return l;
  endfunction
  // Lag of the input of scale n (scale n+1 takes the downsampled images of scale n).
  function automatic int scale_lag_in(int n, int w);
    int l;
    l = 0;
    for (int k = 0; k < n; k++) l += scale_lag_down(k, w);
    return l;
  endfunction
  function automatic int scales_lag_max(int ns, int w, bit dxdy);
    int m;
    m = 0;
    for (int k = 0; k < ns; k++)
      if (scale_lag_in(k, w) + scale_lag_out(k, w, dxdy) > m)
        m = scale_lag_in(k, w) + scale_lag_out(k, w, dxdy);
    return m;
  endfunction

  // ---------------------------------------------------------------- FP16 ops
  function automatic logic fp16_is_zero(fp16_t a);
    return a[14:10] == 5'd0;
  endfunction
  function automatic logic fp16_is_inf(fp16_t a);
    return a[14:10] == 5'd31;
  endfunction

  // Pack sign, biased exponent (wide, signed) and 10-bit fraction with
  // flush-to-zero and overflow-to-infinity.
  function automatic fp16_t fp16_pack(logic s, int e, logic [9:0] f);
    if (e <= 0)  return {s, 15'd0};
    if (e >= 31) return {s, 5'd31, 10'd0};
    return {s, e[4:0], f};
  endfunction

  // Round a mantissa 1.f (11 bits incl. hidden one) with guard and sticky
  // bits to nearest even, then pack.
  function automatic fp16_t fp16_round(logic s, int e, logic [10:0] m, logic g, logic st);
    logic [11:0] r;
    r = {1'b0, m};
    if (g && (st || m[0])) r = r + 12'd1;
    if (r[11]) begin
      return fp16_pack(s, e + 1, r[10:1]);
    end
    return fp16_pack(s, e, r[9:0]);
  endfunction

  function automatic fp16_t fp16_mul_f(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if (fp16_is_inf(a) || fp16_is_inf(b)) return {s, 5'd31, 10'd0};
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp16_round(s, e + 1, p[21:11], p[10], |p[9:0]);
    return fp16_round(s, e, p[20:10], p[9], |p[8:0]);
  endfunction

  function automatic fp16_t fp16_add_f(fp16_t a, fp16_t b);
    fp16_t       x, y;
    logic [13:0] mx, my;     // 1.f then 3 extra bits (guard, round, sticky)
    logic [14:0] sum;
    int          d, e, lz;
    logic        st;
    if (fp16_is_zero(a)) a = 16'h0000;
    if (fp16_is_zero(b)) b = 16'h0000;
    if (fp16_is_inf(a)) return {a[15], 5'd31, 10'd0};
    if (fp16_is_inf(b)) return {b[15], 5'd31, 10'd0};
    if (fp16_is_zero(a)) return b;
    if (fp16_is_zero(b)) return a;
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    mx = {1'b1, x[9:0], 3'b000};
    my = {1'b1, y[9:0], 3'b000};
    d  = int'(x[14:10]) - int'(y[14:10]);
    if (d > 13) begin
      my = 14'd1;  // only the sticky bit survives
    end else if (d > 0) begin
      st = 1'b0;
      for (int i = 0; i < 14; i++) if (i < d && my[i]) st = 1'b1;
      my = (my >> d) | {13'd0, st};
    end
    e = int'(x[14:10]);
    if (x[15] == y[15]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[14]) begin
        sum = {1'b0, sum[14:2], sum[1] | sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 15'd0) return 16'h0000;
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    return fp16_round(x[15], e, sum[13:3], sum[2], |sum[1:0]);
  endfunction

  function automatic fp16_t fp16_sub_f(fp16_t a, fp16_t b);
    return fp16_add_f(a, {~b[15], b[14:0]});
  endfunction

  function automatic fp16_t fp16_div_f(fp16_t a, fp16_t b);
    logic        s;
    logic [23:0] num;
    logic [13:0] q;
    logic [10:0] r;
    int          e;
    s = a[15] ^ b[15];
    if (fp16_is_inf(a) || fp16_is_zero(b)) return {s, 5'd31, 10'd0};
    if (fp16_is_zero(a) || fp16_is_inf(b)) return {s, 15'd0};
    num = {1'b1, a[9:0], 13'd0};
    q   = 14'(num / {13'd0, 1'b1, b[9:0]});
    r   = 11'(num % {13'd0, 1'b1, b[9:0]});
    e   = int'(a[14:10]) - int'(b[14:10]) + 15;
    if (q[13]) return fp16_round(s, e, q[13:3], q[2], (|q[1:0]) | (|r));
    return fp16_round(s, e - 1, q[12:2], q[1], q[0] | (|r));
  endfunction

  // Multiply by 2^k: an "easy multiply", exponent arithmetic only.
  function automatic fp16_t fp16_scale2(fp16_t a, int k);
    if (fp16_is_zero(a)) return 16'h0000;
    if (fp16_is_inf(a)) return a;
    return fp16_pack(a[15], int'(a[14:10]) + k, a[9:0]);
  endfunction

  // Signed total order on FP16 values (both zeros equal).
  function automatic logic [15:0] fp16_key(fp16_t a);
    if (fp16_is_zero(a)) return 16'h8000;
    return a[15] ? {1'b0, ~a[14:0]} : {1'b1, a[14:0]};
  endfunction
  function automatic logic fp16_lt(fp16_t a, fp16_t b);
    return fp16_key(a) < fp16_key(b);
  endfunction

  // Fixed point to FP16: value = v * 2^-shift, rounded to nearest even.
  function automatic fp16_t int_to_fp16(logic signed [31:0] v, int shift);
    logic        s;
    logic [31:0] m;
    int          msb;
    logic [10:0] man;
    logic        g, st;
    if (v == 0) return 16'h0000;
    s = v[31];
    m = s ? 32'(-v) : 32'(v);
    msb = 0;
    for (int i = 0; i < 32; i++) if (m[i]) msb = i;
    if (msb >= 10) begin
      man = 11'(m >> (msb - 10));
      g   = (msb >= 11) ? m[msb-11] : 1'b0;
      st  = 1'b0;
      for (int i = 0; i < 32; i++) if (i < msb - 11 && m[i]) st = 1'b1;
    end else begin
      man = 11'(m << (10 - msb));
      g   = 1'b0;
      st  = 1'b0;
    end
    return fp16_round(s, msb - shift + 15, man, g, st);
  endfunction

  // FP16 to unsigned integer, rounded to nearest, saturated to [0, maxv].
  function automatic int fp16_to_uint_sat(fp16_t a, int maxv);
    int e;
    logic [41:0] m;
    logic [41:0] r;
    if (a[15] || fp16_is_zero(a)) return 0;
    if (fp16_is_inf(a)) return maxv;
    e = int'(a[14:10]) - 15;     // value = 1.f * 2^e
    if (e > 20) return maxv;
    if (e < -1) return 0;
    m = {31'd0, 1'b1, a[9:0]} << (e + 1);  // value * 2^11
    r = (m + 42'd1024) >> 11;              // round half up
    if (r > 42'(maxv)) return maxv;
    return int'(r);
  endfunction

endpackage
