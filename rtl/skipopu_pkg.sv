// skipopu_pkg -- types, constants and conversion functions shared by the
// SkipOPU accelerator core.
//
// Number formats:
//  * fp16_t  : IEEE binary16 (1 sign, 5 exponent, 10 mantissa bits).  The
//              arithmetic here flushes subnormal inputs to zero and never
//              produces subnormals (a choice of this design; the paper does
//              not discuss them).
//  * pe_prod_t : an unnormalised product leaving a PE: sign, 6-bit exponent
//              sum and a 15-bit significand (the paper keeps the 15 MSBs of
//              each 22-bit significand product).  The value it stands for is
//              (-1)^sign * sig * 2^(exp - PROD_EXP_OFS).
//  * fix_t   : signed Q16.16 fixed point, the internal number format of the
//              nonlinear processing engine (this design's choice; the paper
//              gives no internal NPE format).
package skipopu_pkg;

  typedef logic [15:0] fp16_t;

  // PE-array operating mode (the MODE input of the PE).
  typedef enum logic {
    MODE_FP16 = 1'b0,   // FP16 activation x FP16 weight, overpacked DSP
    MODE_INT4 = 1'b1    // FP16 activation x INT4 weight, standard packing
  } pe_mode_e;

  localparam int SIG_W        = 15;  // significand bits kept per product
  localparam int PEXP_W       = 6;   // exponent-sum width
  // Product value = sig * 2^(exp - PROD_EXP_OFS): two FP16 biases (30) plus
  // twenty fraction bits of the two significands, less the seven product
  // LSBs dropped when the 22-bit product is cut to 15 bits.
  localparam int PROD_EXP_OFS = 43;

  typedef struct packed {
    logic              sign;
    logic [PEXP_W-1:0] exp;
    logic [SIG_W-1:0]  sig;
  } pe_prod_t;

  // Signed Q16.16 used inside the NPE.
  localparam int FIX_W    = 32;
  localparam int FIX_FRAC = 16;
  typedef logic signed [FIX_W-1:0] fix_t;

  // Nonlinear-engine operations (one active at a time, Sec. "NPE").
  typedef enum logic [2:0] {
    NPE_RMS_STAT  = 3'd0,  // phase 1 of RMSNorm: accumulate mean / mean of squares
    NPE_RMS_NORM  = 3'd1,  // phase 2 of RMSNorm: (x - mu) / sigma * gamma
    NPE_SM_STAT   = 3'd2,  // phase 1 of softmax: online row max / exp-sum
    NPE_SM_NORM   = 3'd3,  // phase 2 of softmax: exp(s - m) / l
    NPE_SWIGLU    = 3'd4,  // silu(gate) * up
    NPE_ROPE      = 3'd5   // rotary embedding of even/odd pairs
  } npe_op_e;

  // Hidden-bit-extended significand of an FP16 number (0 for zero/subnormal).
  function automatic logic [10:0] fp16_sig(input fp16_t a);
    return (a[14:10] == 5'd0) ? 11'd0 : {1'b1, a[9:0]};
  endfunction

  // FP16 -> Q16.16, truncating toward zero; saturates beyond +-32767.
  function automatic fix_t fp16_to_fix(input fp16_t a);
    logic [47:0] mag;
    int          e;
    fix_t        r;
    e = int'(a[14:10]);
    if (e == 0) return '0;
    mag = 48'({1'b1, a[9:0]});
    // value = mag * 2^(e-25); in Q16.16: mag * 2^(e-9)
    if (e >= 9) mag = mag << (e - 9);
    else        mag = mag >> (9 - e);
    if (mag > 48'h7FFF_FFFF) mag = 48'h7FFF_FFFF;
    r = fix_t'(mag[31:0]);
    return a[15] ? -r : r;
  endfunction

  // Q16.16 -> FP16, truncating; saturates to the largest finite value.
  function automatic fp16_t fix_to_fp16(input fix_t v);
    logic        s;
    logic [31:0] mag;
    int          p;
    int          e;
    logic [9:0]  m;
    s   = v[FIX_W-1];
    mag = s ? 32'(-v) : 32'(v);
    if (mag == 0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    e = p - 16 + 15;                 // biased exponent
    if (e <= 0) return {s, 15'h0};   // flush to zero
    if (e >= 31) return {s, 5'h1E, 10'h3FF};
    if (p >= 10) m = 10'(mag >> (p - 10));
    else         m = 10'(mag << (10 - p));
    return {s, 5'(e), m};
  endfunction


  // ---- Q16.16 arithmetic used by the NPE -------------------------------
  function automatic fix_t fx_sat(input logic signed [63:0] v);
    if (v > 64'sh7FFF_FFFF)  return 32'sh7FFF_FFFF;
    if (v < -64'sh8000_0000) return 32'sh8000_0000;
    return fix_t'(v[31:0]);
  endfunction

  function automatic fix_t fx_mul(input fix_t a, input fix_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_sat(p >>> FIX_FRAC);
  endfunction

  // a / b; division by zero saturates toward the sign of a.
  function automatic fix_t fx_div(input fix_t a, input fix_t b);
    logic signed [63:0] n;
    if (b == 0) return a[FIX_W-1] ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
    n = 64'(a) <<< FIX_FRAC;
    return fx_sat(n / 64'(b));
  endfunction

  // e^x as 2^(x*log2 e): the integer part of the exponent is a shift, the
  // fractional part f uses 2^f ~ 1 + 0.6565 f + 0.3435 f^2 (max. relative
  // error about 0.2 %).
  function automatic fix_t fx_exp(input fix_t x);
    logic signed [63:0] y, r;
    logic signed [31:0] n;
    logic [16:0]        f;
    logic [63:0]        poly;
    y = (64'(x) * 64'sd94548) >>> FIX_FRAC;      // x * log2(e), Q16.16
    n = 32'(y >>> FIX_FRAC);
    f = 17'(y - (64'(n) <<< FIX_FRAC));          // 0 <= f < 1, Q0.16
    poly = (64'd65536 << 16) + 64'd43024 * 64'(f) + ((64'd22512 * 64'(f) * 64'(f)) >> 16);
    r = signed'(poly >> 16);                      // 2^f in Q16.16
    if (n >= 15)  return 32'sh7FFF_FFFF;
    if (n <= -31) return '0;
    if (n >= 0) return fx_sat(r <<< n);
    return fix_t'(r >>> (-n));
  endfunction

  // Square root of a non-negative Q16.16 value (bit-serial integer root of
  // the value scaled by 2^16).
  function automatic fix_t fx_sqrt(input fix_t v);
    logic [47:0] x, res, bitv;
    if (v <= 0) return '0;
    x = 48'(v) << FIX_FRAC;
    res = '0;
    bitv = 48'd1 << 46;
    for (int i = 0; i < 24; i++) begin
      if (x >= res + bitv) begin
        x   = x - (res + bitv);
        res = (res >> 1) + bitv;
      end else res = res >> 1;
      bitv = bitv >> 2;
    end
    return fix_t'(res[31:0]);
  endfunction


  // a > b for FP16 values (zero and subnormals compare as zero).
  function automatic logic fp16_gt(input fp16_t a, input fp16_t b);
    logic [15:0] ka, kb;
    ka = (a[14:10] == 0) ? 16'h8000 : (a[15] ? ~a : {1'b1, a[14:0]});
    kb = (b[14:10] == 0) ? 16'h8000 : (b[15] ? ~b : {1'b1, b[14:0]});
    return ka > kb;
  endfunction

  // FP16 addition with truncation (used for partial-sum accumulation).
  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    logic signed [15:0] ea, eb, e;
    logic signed [27:0] ma, mb, s;
    logic [27:0] mag;
    int lead, ee;
    if (a[14:10] == 0) return b;
    if (b[14:10] == 0) return a;
    ea = 16'(a[14:10]); eb = 16'(b[14:10]);
    ma = 28'({1'b1, a[9:0]}) <<< 14;
    mb = 28'({1'b1, b[9:0]}) <<< 14;
    if (a[15]) ma = -ma;
    if (b[15]) mb = -mb;
    if (ea >= eb) begin e = ea; mb = mb >>> (ea - eb); end
    else          begin e = eb; ma = ma >>> (eb - ea); end
    s = ma + mb;
    mag = s[27] ? 28'(-s) : 28'(s);
    if (mag == 0) return 16'h0000;
    lead = 0;
    for (int i = 0; i < 28; i++) if (mag[i]) lead = i;
    ee = int'(e) + lead - 24;
    if (ee <= 0) return 16'h0000;
    if (ee >= 31) return {s[27], 15'h7BFF};
    return {s[27], 5'(ee), 10'(mag >> (lead - 10))};
  endfunction

  // Number of bits needed to index N things (at least 1).
  function automatic int clog2s(input int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
