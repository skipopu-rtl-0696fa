// mp_pe -- mixed-precision processing element (one DSP, two products).
//
// Each PE multiplies one FP16 activation X by two weights W0 and W1 held in a
// 32-bit word, using a single DSP slice, and hands two unnormalised products
// (sign, exponent sum, 15-bit significand) to the column accumulation trees.
//
// FP16 x FP16 mode -- overpacking with truncation.  With u0, u1, w the
// hidden-bit significands of W0, W1, X:
//   D = u0[10:1]            (u0 loses its LSB)
//   A = {u1[9:0], 16'h0}    (u1 loses its MSB), pre-adder computes D - A
//   B = w
//   C = (u0[0] ? w : 0) >> 1              truncated LSB of u0 re-injected
//     + (u1[4:0] * w[4:0] mod 32) << 16   corruption of bits 16..20 cancelled
//                                         (the auxiliary INT5 multiplier)
//     - (u1[10] ? w : 0) << 26            truncated MSB of u1 re-injected
// so that P[20:0] = (u0*w)[21:1] exactly and P[47:21] = -(u1*w)[21:5].
// The significand kept for the accumulation tree is the 15 MSBs of each
// 22-bit product, (u*w)[21:7].  This follows the paper's equation for
// (u0 - 2^16 u1) w and its Fig. 3(c) bit map.  The paper's Fig. 4(a) draws
// the output taps as P[21:7] / P[38:24] and labels the D input with W1; the
// taps used here are the ones that give the exact fields derived above
// (P[20:6] and the negated P[38:21]).
//
// FP16 x INT4 mode -- standard packing: D = W0[3:0], A = W1[3:0] << 15,
// D + A, B = w, C = 0.  The low field P[14:0] is W0*w, the high field
// P[47:15] plus the low field's sign bit is W1*w.  The exponent of both
// products is X's exponent plus the per-tensor FRACLEN input, so an INT4
// weight q stands for q * 2^(FRACLEN-18) (FRACLEN = 18: plain integer).
//
// Signs come from an XOR (FP16) or from the signed products (INT4).  Zero
// or subnormal operands give a zero product with exponent 0, so they never
// win the column's exponent maximum.
//
// Timing: fully pipelined, one product pair per clock, latency 1 clock
// (the DSP's P register).
module mp_pe
  import skipopu_pkg::*;
(
  input  logic     clk,
  input  logic     ce,
  input  pe_mode_e mode,
  input  logic [4:0] fraclen,
  input  fp16_t    x,
  input  logic [31:0] w,       // {W1, W0}
  output pe_prod_t prod0,      // X * W0
  output pe_prod_t prod1       // X * W1
);
  fp16_t       w0, w1;
  logic [10:0] u0, u1, wx;
  logic [4:0]  int5;
  logic signed [26:0] a_in, d_in;
  logic signed [17:0] b_in;
  logic signed [47:0] c_in, p;
  logic        sub;

  // pipeline copies of sign / exponent / mode
  logic        s0_q, s1_q, z0_q, z1_q, xs_q;
  logic [PEXP_W-1:0] e0_q, e1_q;
  pe_mode_e    mode_q;

  assign w0 = w[15:0];
  assign w1 = w[31:16];

  always_comb begin
    u0   = fp16_sig(w0);
    u1   = fp16_sig(w1);
    wx   = fp16_sig(x);
    int5 = 5'(u1[4:0] * wx[4:0]);
    if (mode == MODE_FP16) begin
      sub  = 1'b1;
      d_in = 27'($unsigned(u0[10:1]));
      a_in = 27'({u1[9:0], 16'h0});
      b_in = 18'($unsigned(wx));
      c_in = 48'($unsigned(u0[0] ? (wx >> 1) : 11'd0))
           + (48'($unsigned(int5)) << 16)
           - (u1[10] ? (48'($unsigned(wx)) << 26) : 48'd0);
    end else begin
      sub  = 1'b0;
      d_in = 27'(signed'(w0[3:0]));
      a_in = 27'(signed'(w1[3:0])) <<< 15;
      b_in = 18'($unsigned(wx));
      c_in = '0;
    end
  end

  dsp_mac u_dsp (.clk, .ce, .sub, .a(a_in), .d(d_in), .b(b_in), .c(c_in), .p);

  always_ff @(posedge clk)
    if (ce) begin
      mode_q <= mode;
      xs_q   <= x[15];
      s0_q   <= x[15] ^ w0[15];
      s1_q   <= x[15] ^ w1[15];
      z0_q   <= (wx == 0) || (mode == MODE_FP16 && u0 == 0);
      z1_q   <= (wx == 0) || (mode == MODE_FP16 && u1 == 0);
      e0_q   <= (mode == MODE_FP16) ? PEXP_W'(x[14:10]) + PEXP_W'(w0[14:10])
                                    : PEXP_W'(x[14:10]) + PEXP_W'(fraclen);
      e1_q   <= (mode == MODE_FP16) ? PEXP_W'(x[14:10]) + PEXP_W'(w1[14:10])
                                    : PEXP_W'(x[14:10]) + PEXP_W'(fraclen);
    end

  // Output field extraction (post-processing of P).
  logic [26:0]        hi_neg;
  logic signed [14:0] lo_i4;
  logic signed [32:0] hi_i4;
  logic [14:0]        mag0_i4, mag1_i4;

  always_comb begin
    hi_neg  = 27'(-p[47:21]);                  // (u1*w)[21:5]
    lo_i4   = p[14:0];
    hi_i4   = p[47:15] + 33'(p[14]);
    mag0_i4 = lo_i4[14] ? 15'(-lo_i4) : 15'(lo_i4);
    mag1_i4 = hi_i4[32] ? 15'(-hi_i4) : 15'(hi_i4);

    if (mode_q == MODE_FP16) begin
      prod0 = '{sign: s0_q, exp: e0_q, sig: p[20:6]};
      prod1 = '{sign: s1_q, exp: e1_q, sig: hi_neg[16:2]};
    end else begin
      prod0 = '{sign: xs_q ^ lo_i4[14], exp: e0_q, sig: mag0_i4};
      prod1 = '{sign: xs_q ^ hi_i4[32], exp: e1_q, sig: mag1_i4};
    end
    if (z0_q) prod0 = '0;
    if (z1_q) prod1 = '0;
  end

endmodule
